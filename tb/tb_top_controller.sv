// tb_top_controller: self-checking test of the layer controller at N_PE = 4,
// with behavioural stand-ins for the datapath (I&W buffers with random
// ld_ready, a compute pass of fixed length, output and ranking units that
// stay busy for a few cycles) and a DRAM that answers every read after two
// cycles (each block reports data_length 3).
//
// Layer: C_i = 6 (two input groups, the second half empty), C_o = 10 (three
// output groups, the last partial), 2 x 2 tiles. Checked for both
// Reuse-IFM-First and Reuse-Weight-First (the second run also with channel
// clustering, whose index buffer is modelled as a reversal inside each group):
//  * the exact sequence of compressed blocks requested from DRAM (kind, PE
//    row, PE column, address), against a model of the loop nest with the
//    per-bank reuse tags; rows and columns that do not exist are skipped;
//  * the order of the output blocks (all OC groups of a tile first for RIF,
//    all tiles of an OC group first for RWF);
//  * the pass, load and reuse counters, one ranking per OC group, and
//    exactly one done pulse.
module tb_top_controller;
  import sense_pkg::*;
  localparam int NP = 4, CI = 6, CO = 10, TR = 2, TC = 2, IH = 6, KH = 3;
  localparam int IS = 100, WS = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic mem_rd_en, mem_rd_valid;
  logic [MAW-1:0] mem_rd_addr;
  logic [MDW-1:0] mem_rd_data;
  logic ld_bank, ld_start, ld_is_wgt, ld_valid, ld_ready, ld_busy, ld_clr_ifm, ld_clr_w;
  logic [COLIDW-1:0] ld_row, ld_col;
  data_t ld_data;
  logic [CHW-1:0] idx_addr, idx_data;
  logic rd_bank, rd_start, rd_done;
  drain_t drain;
  logic post_start, ob_bank, ob_clr, ob_rd_start, comp_start, out_busy;
  logic [PAW:0] ob_rd_len;
  logic [15:0] out_tile;
  logic [CHW-1:0] out_ocg;
  logic nze_clear, sort_start, sort_busy;
  logic [CHW-1:0] nz_ch_base, sort_group;
  logic [31:0] stat_passes, stat_ifm_loads, stat_w_loads, stat_ifm_reuse, stat_w_reuse;

  top_controller #(.N_PE(NP)) dut (.*);

  // ---- stand-ins ----
  logic rv1; logic [MAW-1:0] ra1;
  always_ff @(posedge clk) begin
    rv1 <= mem_rd_en; ra1 <= mem_rd_addr;
    mem_rd_valid <= rv1;
    mem_rd_data  <= {16'(ra1 * 7), 16'd3};
  end
  assign ld_busy = 1'b0;
  always @(negedge clk) ld_ready <= ($urandom % 4) != 0;
  assign idx_data = CHW'((idx_addr / NP) * NP + (NP - 1 - idx_addr % NP));

  int rd_cnt, ob_cnt, so_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rd_cnt <= 0; ob_cnt <= 0; so_cnt <= 0; end
    else begin
      rd_cnt <= rd_start ? 15 : (rd_cnt > 0 ? rd_cnt - 1 : 0);
      ob_cnt <= comp_start ? 8 : (ob_cnt > 0 ? ob_cnt - 1 : 0);
      so_cnt <= sort_start ? 6 : (so_cnt > 0 ? so_cnt - 1 : 0);
    end
  end
  assign rd_done   = (rd_cnt == 1);
  assign out_busy  = (ob_cnt != 0);
  assign sort_busy = (so_cnt != 0) || sort_start;

  // ---- observation ----
  int got_blk[$], got_out[$];
  int n_done, n_sort;
  always @(posedge clk) begin
    if (ld_start) got_blk.push_back((int'(ld_is_wgt) << 28) | (int'(ld_row) << 24) | (int'(ld_col) << 20) | int'(mem_rd_addr));
    if (comp_start) got_out.push_back(int'(out_tile) * 100 + int'(out_ocg));
    if (done) n_done++;
    if (sort_start) n_sort++;
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic run(reuse_e reuse, bit clu);
    int exp_blk[$], exp_out[$];
    int tag_i[2], tag_w[2];
    int li = 0, lw = 0, ri = 0, rw = 0, p = 0;
    int tic = (CI + NP - 1) / NP, toc = (CO + NP - 1) / NP, nt = TR * TC;
    int a_n = (reuse == RIF) ? 1 : toc, d_n = (reuse == RIF) ? toc : 1;
    tag_i[0] = -1; tag_i[1] = -1; tag_w[0] = -1; tag_w[1] = -1;
    for (int a = 0; a < a_n; a++)
      for (int t = 0; t < nt; t++)
        for (int d = 0; d < d_n; d++) begin
          automatic int ocg = (reuse == RIF) ? d : a;
          for (int e = 0; e < tic; e++) begin
            automatic int b = p % 2;
            if (tag_i[b] != t * 1000 + e) begin
              li++;
              tag_i[b] = t * 1000 + e;
              for (int r = 0; r < NP; r++) begin
                automatic int ic = e * NP + r;
                automatic int ph = clu ? (ic / NP) * NP + (NP - 1 - ic % NP) : ic;
                if (ic < CI) exp_blk.push_back((r << 24) | (32'h1000 + (t * CI + ph) * IS));
              end
            end else ri++;
            if (tag_w[b] != ocg * 1000 + e) begin
              lw++;
              tag_w[b] = ocg * 1000 + e;
              for (int r = 0; r < NP; r++)
                for (int c = 0; c < NP; c++) begin
                  automatic int ic = e * NP + r, oc = ocg * NP + c;
                  automatic int ph = clu ? (ic / NP) * NP + (NP - 1 - ic % NP) : ic;
                  if (ic < CI && oc < CO)
                    exp_blk.push_back((1 << 28) | (r << 24) | (c << 20) | (32'h8000 + (oc * CI + ph) * WS));
                end
            end else rw++;
            p++;
          end
          exp_out.push_back(t * 100 + ocg);
        end
    cfg = '0;
    cfg.ci = CI; cfg.co = CO; cfg.t_row = TR; cfg.t_col = TC; cfg.ih = IH; cfg.iw = IH;
    cfg.kh = KH; cfg.kw = KH; cfg.nzew_max = 5; cfg.sparse_mode = 1'b1; cfg.relu_en = 1'b1;
    cfg.use_cluster = clu; cfg.reuse = reuse;
    cfg.i_base = 32'h1000; cfg.w_base = 32'h8000; cfg.o_base = 32'h20000;
    cfg.i_stride = IS; cfg.w_stride = WS; cfg.o_stride = 64;
    got_blk = {}; got_out = {}; n_done = 0; n_sort = 0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (n_done == 0) @(negedge clk);
    repeat (20) @(negedge clk);
    chk("blocks requested", got_blk.size(), exp_blk.size());
    foreach (exp_blk[i]) begin
      if (i >= got_blk.size()) break;
      checks++;
      if (got_blk[i] != exp_blk[i]) begin
        failures++;
        $display("FAIL %s block %0d: got %h exp %h", reuse.name(), i, got_blk[i], exp_blk[i]);
        break;
      end
    end
    checks++;
    if (got_out != exp_out) begin failures++; $display("FAIL %s output order", reuse.name()); end
    chk("passes", int'(stat_passes), p);
    chk("IFM loads", int'(stat_ifm_loads), li);
    chk("IFM reuse", int'(stat_ifm_reuse), ri);
    chk("weight loads", int'(stat_w_loads), lw);
    chk("weight reuse", int'(stat_w_reuse), rw);
    chk("rankings", n_sort, toc);
    chk("done pulses", n_done, 1);
    $display("%s: %0d passes, IFM loads %0d reuse %0d, W loads %0d reuse %0d", reuse.name(),
             p, li, ri, lw, rw);
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(RIF, 1'b0);
    run(RWF, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
