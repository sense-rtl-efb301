// tb_iw_buffer: self-checking test of one row's I&W buffer (4-column array).
//
// Each round loads a random compressed 6 x 6 IFM tile and four random 3 x 3
// kernels (0..9 NZEs each) into one bank, with random gaps in the load
// stream, then replays the bank and compares every token with the expected
// weight-oriented stream: per weight step N_PE weight tokens (zero weight for
// kernels with fewer NZEs), then nzei_max IFM slots. The replay must take
// nzew_max * (N_PE + nzei_max) cycles. From the second round on, the next
// round's bank is loaded while the current bank is being replayed
// (ping-pong), which must not disturb the replay. A cleared bank must read
// as empty.
module tb_iw_buffer;
  import sense_pkg::*;
  localparam int NP = 4, IH = 6, KH = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [LOCW:0] cfg_ih, cfg_iw, cfg_kh, cfg_kw;
  logic ld_bank, ld_start, ld_is_wgt, ld_valid, ld_ready, ld_busy, ld_clr_ifm, ld_clr_w;
  logic [COLIDW-1:0] ld_col;
  logic [DW-1:0] ld_data;
  logic [8:0] ifm_len [2];
  logic rd_bank, rd_start, rd_busy, rd_done;
  logic [8:0] nzei_max;
  logic [7:0] nzew_max;
  tok_t tok;

  iw_buffer #(.N_PE(NP), .IMAX(64), .KMAX(16)) dut (.*);

  int checks = 0, failures = 0;
  int ifm [2][IH*IH];
  int wgt [2][NP][KH*KH];

  // one compressed block as 16-bit halves
  task automatic load_block(bit bank, bit is_w, int col, int vals[$], int n);
    int h[$];
    automatic int k = 0;
    foreach (vals[i]) if (vals[i] != 0) k++;
    h.push_back(k);
    for (int w = 0; w < (n + 15) / 16; w++) begin
      automatic int word = 0;
      for (int b = 0; b < 16; b++) if (w*16+b < n && vals[w*16+b] != 0) word |= 1 << b;
      h.push_back(word);
    end
    foreach (vals[i]) if (vals[i] != 0) h.push_back(vals[i] & 16'hffff);
    while (ld_busy) @(negedge clk);
    ld_bank = bank; ld_is_wgt = is_w; ld_col = COLIDW'(col); ld_start = 1'b1;
    @(negedge clk);
    ld_start = 1'b0;
    foreach (h[i]) begin
      while (($urandom % 3) == 0) begin ld_valid = 1'b0; @(negedge clk); end
      ld_valid = 1'b1; ld_data = DW'(h[i]);
      #1;
      while (!ld_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    ld_valid = 1'b0;
  endtask

  task automatic fill_bank(bit b);
    int q[$];
    @(negedge clk); ld_bank = b; ld_clr_ifm = 1'b1; ld_clr_w = 1'b1;
    @(negedge clk); ld_clr_ifm = 1'b0; ld_clr_w = 1'b0;
    q = {};
    for (int p = 0; p < IH*IH; p++) begin
      ifm[b][p] = (($urandom % 2) != 0) ? int'($urandom_range(1, 200)) - 100 : 0;
      q.push_back(ifm[b][p]);
    end
    load_block(b, 1'b0, 0, q, IH*IH);
    for (int c = 0; c < NP; c++) begin
      automatic int dens = $urandom_range(0, 100);
      q = {};
      for (int p = 0; p < KH*KH; p++) begin
        wgt[b][c][p] = (($urandom % 100) < dens) ? int'($urandom_range(1, 50)) : 0;
        q.push_back(wgt[b][c][p]);
      end
      if (c != 2 || ($urandom % 2)) load_block(b, 1'b1, c, q, KH*KH);
      else for (int p = 0; p < KH*KH; p++) wgt[b][c][p] = 0;   // never loaded: cleared
    end
    while (ld_busy) @(negedge clk);
  endtask

  // replay bank b and compare
  task automatic replay(bit b, int round);
    int wl[NP], wv[NP][$], wr[NP][$], wc[NP][$];
    int iv[$], ir[$], ic[$];
    int nzw, nzi, cyc, ti;
    tok_t exp_q[$];
    nzw = 0;
    for (int c = 0; c < NP; c++) begin
      wv[c] = {}; wr[c] = {}; wc[c] = {};
      for (int p = 0; p < KH*KH; p++)
        if (wgt[b][c][p] != 0) begin wv[c].push_back(wgt[b][c][p]); wr[c].push_back(p / KH); wc[c].push_back(p % KH); end
      if (wv[c].size() > nzw) nzw = wv[c].size();
    end
    iv = {}; ir = {}; ic = {};
    for (int p = 0; p < IH*IH; p++)
      if (ifm[b][p] != 0) begin iv.push_back(ifm[b][p]); ir.push_back(p / IH); ic.push_back(p % IH); end
    checks++;
    if (int'(ifm_len[b]) != iv.size()) begin failures++; $display("FAIL ifm_len %0d exp %0d", ifm_len[b], iv.size()); end
    nzi = iv.size() + int'($urandom_range(0, 3));      // extra empty slots
    exp_q = {};
    for (int f = 0; f < nzw; f++) begin
      for (int c = 0; c < NP; c++) begin
        automatic tok_t t = '0;
        t.valid = 1'b1; t.is_wgt = 1'b1; t.col = COLIDW'(c);
        if (f < wv[c].size()) begin t.data = DW'(wv[c][f]); t.r = LOCW'(wr[c][f]); t.c = LOCW'(wc[c][f]); end
        exp_q.push_back(t);
      end
      for (int g = 0; g < nzi; g++) begin
        automatic tok_t t = '0;
        if (g < iv.size()) begin t.valid = 1'b1; t.data = DW'(iv[g]); t.r = LOCW'(ir[g]); t.c = LOCW'(ic[g]); end
        exp_q.push_back(t);
      end
    end
    @(negedge clk);
    rd_bank = b; nzei_max = 9'(nzi); nzew_max = 8'(nzw); rd_start = 1'b1;
    @(negedge clk);
    rd_start = 1'b0;
    @(negedge clk);                     // first token registered
    cyc = 1; ti = 0;
    while (1) begin
      // sample the token registered at the previous edge
      begin
        if (ti < exp_q.size()) begin
          automatic tok_t e = exp_q[ti];
          automatic bit ok = (tok.valid == e.valid) &&
                   (!e.valid || (tok.is_wgt == e.is_wgt && tok.data == e.data &&
                                 (e.is_wgt ? tok.col == e.col : 1'b1) &&
                                 (e.data == 0 || (tok.r == e.r && tok.c == e.c))));
          checks++;
          if (!ok) begin
            failures++;
            if (failures < 10) $display("FAIL round %0d token %0d: got %p exp %p", round, ti, tok, e);
          end
        end
        ti++;
      end
      if (rd_done) break;
      if (cyc > 5000) break;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (ti != exp_q.size() || (nzw > 0 && cyc != nzw * (NP + nzi))) begin
      failures++;
      $display("FAIL round %0d: %0d tokens in %0d cycles, exp %0d tokens in %0d", round, ti, cyc,
               exp_q.size(), nzw * (NP + nzi));
    end
  endtask

  initial begin
    cfg_ih = IH; cfg_iw = IH; cfg_kh = KH; cfg_kw = KH;
    ld_bank = 0; ld_start = 0; ld_is_wgt = 0; ld_col = 0; ld_valid = 0; ld_data = 0;
    ld_clr_ifm = 0; ld_clr_w = 0; rd_bank = 0; rd_start = 0; nzei_max = 0; nzew_max = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fill_bank(1'b0);
    for (int round = 0; round < 40; round++) begin
      automatic bit b = round[0];
      fork
        replay(b, round);
        fill_bank(!b);
      join
    end
    // cleared bank reads as empty
    @(negedge clk); ld_bank = 1'b1; ld_clr_ifm = 1'b1; ld_clr_w = 1'b1;
    @(negedge clk); ld_clr_ifm = 1'b0; ld_clr_w = 1'b0;
    for (int p = 0; p < IH*IH; p++) ifm[1][p] = 0;
    for (int c = 0; c < NP; c++) for (int p = 0; p < KH*KH; p++) wgt[1][c][p] = 0;
    checks++;
    if (ifm_len[1] != 0) begin failures++; $display("FAIL clear"); end
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
