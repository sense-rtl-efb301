// tb_sense_full: end-to-end test of sense_top at the default size (32 x 32 array,
// 9 x 9 IFM tile, 3 x 3 kernels pruned to 4 non-zeros, 7 x 7 output tile)
//
// The testbench generates random sparse IFM tiles (about half zeros, as after
// ReLU) and load-balanced pruned kernels (every kernel has exactly NZW
// non-zeros), writes them into a behavioural DRAM in the compressed format
// (data_length, bitmap, NZEs), runs the layer, then decompresses every OFM
// block found in DRAM and compares it with a convolution computed here
// (16-bit wrap-around arithmetic, ReLU, 2x2 max pooling). It also checks the
// ranked channel index of the clustering module against a sort done here,
// and counts how often each mechanism occurred.
module tb_sense_full;
  import sense_pkg::*;
  localparam int NP  = 32;
  localparam int CI  = 32;
  localparam int CO  = 32;
  localparam int TR  = 1;
  localparam int TC  = 1;
  localparam int IH  = 9;
  localparam int KH  = 3;
  localparam int HO  = IH - KH + 1;
  localparam int NZW = 4;
  localparam int NT  = TR * TC;
  localparam int IB = 32'h0000_1000, WB = 32'h0010_0000, OB = 32'h0020_0000, DB = 32'h0030_0000;
  localparam int IS = 160, WS = 24, OS = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic mem_rd_en, mem_rd_valid, mem_wr_en, mem_wr_ready;
  logic [MAW-1:0] mem_rd_addr, mem_wr_addr;
  logic [MDW-1:0] mem_rd_data, mem_wr_data;
  logic [31:0] st_passes, st_il, st_wl, st_ir, st_wr, st_macs;

  sense_top  dut (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .mem_rd_en, .mem_rd_addr, .mem_rd_valid, .mem_rd_data,
    .mem_wr_en, .mem_wr_addr, .mem_wr_data, .mem_wr_ready,
    .stat_passes(st_passes), .stat_ifm_loads(st_il), .stat_w_loads(st_wl),
    .stat_ifm_reuse(st_ir), .stat_w_reuse(st_wr), .stat_macs(st_macs)
  );

  // ---------------- behavioural DRAM ----------------
  logic [31:0] mem [int];
  logic        rv1;
  logic [31:0] ra1;
  int          rd_words, wr_words;
  always @(posedge clk) begin
    if (mem_wr_en && mem_wr_ready) mem[int'(mem_wr_addr)] = mem_wr_data;
  end
  always_ff @(posedge clk) begin
    rv1 <= mem_rd_en;
    ra1 <= mem_rd_addr;
    mem_rd_valid <= rv1;
    mem_rd_data  <= mem.exists(int'(ra1)) ? mem[int'(ra1)] : 32'h0;
    if (mem_rd_en) rd_words <= rd_words + 1;
    if (mem_wr_en && mem_wr_ready) wr_words <= wr_words + 1;
    mem_wr_ready <= ($urandom % 4) != 0;
  end

  int checks = 0, failures = 0;
  int co_run = CO;  // output channels of the current run (<= CO)
  int ifm [NT][CI][IH*IH];
  int wgt [CO][CI][KH*KH];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int m_ifm_reuse, m_w_reuse, m_rif, m_rwf, m_cluster, m_pool, m_relu_clip, m_dense,
      m_gated, m_empty_rows, m_reorder;

  function automatic int s16(int v);
    return int'(signed'(16'(v)));
  endfunction

  // write one compressed block; dense=1 stores every element (all-ones bitmap)
  task automatic put_block(int base, int n, int vals[$], bit dense);
    int h[$];
    int nb, k;
    k = 0;
    for (int i = 0; i < n; i++) if (dense || vals[i] != 0) k++;
    h.push_back(k);
    nb = (n + 15) / 16;
    for (int w = 0; w < nb; w++) begin
      automatic int word = 0;
      for (int b = 0; b < 16; b++)
        if (w*16+b < n && (dense || vals[w*16+b] != 0)) word |= (1 << b);
      h.push_back(word);
    end
    for (int i = 0; i < n; i++) if (dense || vals[i] != 0) h.push_back(vals[i] & 16'hffff);
    for (int i = 0; i < h.size(); i += 2)
      mem[base + i/2] = (h[i] & 16'hffff) | ((i+1 < h.size() ? (h[i+1] & 16'hffff) : 0) << 16);
  endtask

  function automatic int half_at(int base, int k);
    automatic int w = mem.exists(base + k/2) ? int'(mem[base + k/2]) : 0;
    return (k % 2) ? ((w >> 16) & 16'hffff) : (w & 16'hffff);
  endfunction

  task automatic gen_data();
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < CI; i++)
        for (int p = 0; p < IH*IH; p++)
          ifm[t][i][p] = (($urandom % 100) < 50) ? int'($urandom_range(1, 15)) - 6 : 0;
    for (int o = 0; o < CO; o++)
      for (int i = 0; i < CI; i++) begin
        int pos[$];
        for (int p = 0; p < KH*KH; p++) begin wgt[o][i][p] = 0; pos.push_back(p); end
        pos.shuffle();
        for (int j = 0; j < NZW; j++) begin
          int v;
          v = int'($urandom_range(1, 14)) - 7;
          if (v == 0) v = 5;
          wgt[o][i][pos[j]] = v;
        end
      end
  endtask

  task automatic store(int ibase, int wbase, bit dense);
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < CI; i++) begin
        int q[$];
        for (int p = 0; p < IH*IH; p++) q.push_back(ifm[t][i][p]);
        put_block(ibase + (t*CI + i)*IS, IH*IH, q, dense);
      end
    for (int o = 0; o < CO; o++)
      for (int i = 0; i < CI; i++) begin
        int q[$];
        for (int p = 0; p < KH*KH; p++) q.push_back(wgt[o][i][p]);
        put_block(wbase + (o*CI + i)*WS, KH*KH, q, dense);
      end
  endtask

  // reference output of (tile t, channel o) after post-processing
  task automatic ref_tile(int t, int o, bit relu, bit pool, output int r[$]);
    int full [HO*HO];
    r = {};
    for (int y = 0; y < HO; y++)
      for (int x = 0; x < HO; x++) begin
        automatic int acc = 0;
        for (int i = 0; i < CI; i++)
          for (int a = 0; a < KH; a++)
            for (int b = 0; b < KH; b++)
              acc += ifm[t][i][(y+a)*IH + x+b] * wgt[o][i][a*KH+b];
        acc = s16(acc);
        if (relu && acc < 0) begin acc = 0; m_relu_clip++; end
        full[y*HO+x] = acc;
      end
    if (!pool) begin
      for (int p = 0; p < HO*HO; p++) r.push_back(full[p]);
    end else begin
      m_pool++;
      for (int y = 0; y < HO/2; y++)
        for (int x = 0; x < HO/2; x++) begin
          automatic int m = full[(2*y)*HO + 2*x];
          if (full[(2*y)*HO + 2*x+1] > m) m = full[(2*y)*HO + 2*x+1];
          if (full[(2*y+1)*HO + 2*x] > m) m = full[(2*y+1)*HO + 2*x];
          if (full[(2*y+1)*HO + 2*x+1] > m) m = full[(2*y+1)*HO + 2*x+1];
          r.push_back(m);
        end
    end
  endtask

  // ranked channel index as the hardware will look it up (unwritten = identity)
  function automatic int rank_at(int a);
    return dut.u_clu.ibuf_vld[a] ? int'(dut.u_clu.ibuf[a]) : a;
  endfunction

  task automatic check_outputs(bit relu, bit pool, bit do_sort);
    int nzc [CO];
    for (int o = 0; o < CO; o++) nzc[o] = 0;
    for (int t = 0; t < NT; t++)
      for (int o = 0; o < co_run; o++) begin
        int r[$];
        int base, len, n, nb, k, bad;
        ref_tile(t, o, relu, pool, r);
        n    = r.size();
        base = OB + (t*co_run + o)*OS;
        len  = half_at(base, 0);
        nb   = (n + 15) / 16;
        k    = 0;
        bad  = 0;
        for (int p = 0; p < n; p++) begin
          automatic int got = 0;
          if ((half_at(base, 1 + p/16) >> (p % 16)) & 1) begin
            got = s16(half_at(base, 1 + nb + k));
            k++;
          end
          if (got != r[p]) bad++;
          if (r[p] != 0) nzc[o]++;
        end
        checks++;
        if (bad != 0 || k != len) begin
          failures++;
          $display("FAIL OFM tile %0d oc %0d: %0d wrong elements, len %0d vs %0d", t, o, bad, len, k);
        end
        // clear so the next run cannot pass on stale data
        for (int w = 0; w < OS; w++) mem[base + w] = 32'h0;
      end
    if (do_sort) begin
      for (int g = 0; g < (co_run + NP - 1) / NP; g++) begin
        int exp_idx[$];
        for (int k = 0; k < NP; k++) begin
          // stable descending by count; channels beyond CO count as zero
          automatic int best = -1, bestc = -1;
          for (int c = 0; c < NP; c++) begin
            automatic int ch = g*NP + c, cnt;
            automatic bit used = 0;
            foreach (exp_idx[u]) if (exp_idx[u] == ch) used = 1;
            cnt = (ch < co_run) ? nzc[ch] : 0;
            if (!used && cnt > bestc) begin best = ch; bestc = cnt; end
          end
          exp_idx.push_back(best);
        end
        for (int k = 0; k < NP; k++) begin
          checks++;
          if (rank_at(g*NP + k) != exp_idx[k]) begin
            failures++;
            $display("FAIL rank group %0d pos %0d: got %0d exp %0d", g, k,
                     rank_at(g*NP + k), exp_idx[k]);
          end
          if (exp_idx[k] != g*NP + k) m_reorder++;
        end
      end
    end
  endtask

  task automatic run_layer(bit dense, reuse_e reuse, bit relu, bit pool, bit clu, int ibase, int wbase);
    int t0;
    cfg = '0;
    cfg.ci = CHW'(CI); cfg.co = CHW'(co_run); cfg.t_row = 8'(TR); cfg.t_col = 8'(TC);
    cfg.ih = 5'(IH); cfg.iw = 5'(IH); cfg.kh = 5'(KH); cfg.kw = 5'(KH);
    cfg.nzew_max = dense ? 8'(KH*KH) : 8'(NZW);
    cfg.sparse_mode = !dense; cfg.relu_en = relu; cfg.pool_en = pool;
    cfg.use_cluster = clu; cfg.reuse = reuse;
    cfg.i_base = ibase; cfg.w_base = wbase; cfg.o_base = OB;
    cfg.i_stride = 16'(IS); cfg.w_stride = 16'(WS); cfg.o_stride = 16'(OS);
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t0 = cyc;
    wait (done);
    @(posedge clk);
    $display("run dense=%0d reuse=%s cluster=%0d: %0d cycles, passes %0d, IFM loads %0d reused %0d, W loads %0d reused %0d, MACs %0d, DRAM words read %0d",
             dense, reuse.name(), clu, cyc - t0, st_passes, st_il, st_ir, st_wl, st_wr, st_macs, rd_words);
    m_ifm_reuse += st_ir; m_w_reuse += st_wr;
    if (reuse == RIF) m_rif++; else m_rwf++;
    if (clu) m_cluster++;
    if (dense) m_dense++;
    checks++;
    if (st_passes != ((CI+NP-1)/NP) * ((co_run+NP-1)/NP) * NT) begin
      failures++; $display("FAIL pass count %0d", st_passes);
    end
    // gated MACs: products that were skipped (zero operand or invalid location)
    if (!dense && st_macs < NT*CI*co_run*NZW*IH*IH) m_gated++;
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %s: %0d", what, n);
  endtask

  initial begin
    start = 1'b0; cfg = '0; rd_words = 0; wr_words = 0;
    m_ifm_reuse = 0; m_w_reuse = 0; m_rif = 0; m_rwf = 0; m_cluster = 0; m_pool = 0;
    m_relu_clip = 0; m_dense = 0; m_gated = 0; m_empty_rows = 0; m_reorder = 0;
    gen_data();
    store(IB, WB, 1'b0);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    run_layer(1'b0, RIF, 1'b1, 1'b0, 1'b0, IB, WB);
    check_outputs(1'b1, 1'b0, 1'b1);
    need("ReLU clipped a value", m_relu_clip);
    need("MAC gating", m_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
