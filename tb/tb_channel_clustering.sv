// tb_channel_clustering: self-checking test of the channel clustering module
// at 4 columns and 64 channels.
//
// 1. NZE number buffer and ranking: random NZE counts for several tiles of
//    channel groups 0..2 are reported through nz_valid, then each group is
//    ranked; the channel index lookup must return a stable descending order
//    of the accumulated counts, and untouched entries must read as their
//    own index. nze_clear must empty the counts (a new ranking of a cleared
//    group is the identity).
// 2. Crossbar and FIFOs: the four columns send compressed streams of random
//    length at the same time with random gaps, the DRAM side stalls at
//    random; every column's halves must arrive packed two per word (first
//    half in the low 16 bits, odd tail padded with zero) with word indices
//    0, 1, 2 ... restarting for each block.
module tb_channel_clustering;
  import sense_pkg::*;
  localparam int NP = 4, MAXC = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cm_valid [NP], cm_last [NP], cm_ready [NP];
  data_t cm_data [NP];
  logic wr_valid, wr_ready;
  logic [COLIDW-1:0] wr_col;
  logic [15:0] wr_widx;
  logic [MDW-1:0] wr_word;
  logic nze_clear, nz_valid [NP];
  logic [6:0] nz_count [NP];
  logic [CHW-1:0] nz_ch_base, sort_group, idx_addr, idx_data;
  logic sort_start, sort_busy, sort_done, busy;

  channel_clustering #(.N_PE(NP), .MAX_CH(MAXC), .FDEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int tot [MAXC];

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic rank_group(int g, bit identity);
    int exp_i[$];
    bit used[NP];
    for (int c = 0; c < NP; c++) used[c] = 0;
    for (int k = 0; k < NP; k++) begin
      automatic int best = -1;
      for (int c = 0; c < NP; c++)
        if (!used[c] && (best < 0 || (!identity && tot[g*NP+c] > tot[g*NP+best]))) best = c;
      used[best] = 1;
      exp_i.push_back(g*NP + best);
    end
    @(negedge clk); sort_group = CHW'(g); sort_start = 1'b1;
    @(negedge clk); sort_start = 1'b0;
    while (sort_busy) @(negedge clk);
    for (int k = 0; k < NP; k++) begin
      idx_addr = CHW'(g*NP + k); #1;
      chk($sformatf("rank group %0d position %0d", g, k), int'(idx_data), exp_i[k]);
    end
  endtask

  // stream source per column
  int sq [NP][$];
  int sent_blocks;
  task automatic send(int c, int nblk);
    for (int b = 0; b < nblk; b++) begin
      automatic int n = $urandom_range(1, 9);
      for (int i = 0; i < n; i++) begin
        automatic int v = $urandom_range(0, 65535);
        sq[c].push_back(v);
        while ($urandom % 3 == 0) begin cm_valid[c] = 1'b0; @(negedge clk); end
        cm_valid[c] = 1'b1; cm_data[c] = DW'(v); cm_last[c] = (i == n - 1);
        #1;
        while (!cm_ready[c]) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      cm_valid[c] = 1'b0; cm_last[c] = 1'b0;
      if (n % 2) sq[c].push_back(-1);           // pad marker
      sq[c].push_back(-2);                      // block end marker
    end
  endtask

  int wq [NP][$];
  always @(posedge clk) if (wr_valid && wr_ready) begin
    wq[wr_col].push_back(int'(wr_widx));
    wq[wr_col].push_back(int'(wr_word[15:0]));
    wq[wr_col].push_back(int'(wr_word[31:16]));
  end
  bit bp_on;
  always @(negedge clk) wr_ready <= bp_on ? (($urandom % 3) != 0) : 1'b1;

  initial begin
    for (int c = 0; c < NP; c++) begin cm_valid[c] = 0; cm_last[c] = 0; cm_data[c] = 0; nz_valid[c] = 0; nz_count[c] = 0; end
    nze_clear = 0; nz_ch_base = 0; sort_group = 0; sort_start = 0; idx_addr = 0; bp_on = 0;
    for (int i = 0; i < MAXC; i++) tot[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < MAXC; i++) begin
      idx_addr = CHW'(i); #1;
      chk("identity before ranking", int'(idx_data), i);
    end
    // ---- 1: counts and ranking ----
    for (int t = 0; t < 9; t++) begin
      automatic int g = t % 3;
      @(negedge clk);
      nz_ch_base = CHW'(g * NP);
      for (int c = 0; c < NP; c++) begin
        nz_valid[c] = ($urandom % 4) != 0;
        nz_count[c] = 7'($urandom_range(0, (t < 3) ? 3 : 64));
        if (nz_valid[c]) tot[g*NP + c] += int'(nz_count[c]);
      end
      @(negedge clk);
      for (int c = 0; c < NP; c++) nz_valid[c] = 1'b0;
    end
    for (int g = 0; g < 3; g++) rank_group(g, 1'b0);
    for (int i = 3*NP; i < MAXC; i++) begin
      idx_addr = CHW'(i); #1;
      chk("untouched entry", int'(idx_data), i);
    end
    @(negedge clk); nze_clear = 1'b1;
    @(negedge clk); nze_clear = 1'b0;
    rank_group(1, 1'b1);
    // ---- 2: packing ----
    for (int r = 0; r < 2; r++) begin
      bp_on = r;
      for (int c = 0; c < NP; c++) begin sq[c] = {}; wq[c] = {}; end
      fork
        send(0, 5);
        send(1, 5);
        send(2, 5);
        send(3, 5);
      join
      repeat (5) @(negedge clk);
      while (busy) @(negedge clk);
      for (int c = 0; c < NP; c++) begin
        // rebuild expected (widx, lo, hi) triples from the sent halves
        automatic int e[$];
        automatic int w = 0, i = 0;
        while (i < sq[c].size()) begin
          if (sq[c][i] == -2) begin w = 0; i++; continue; end
          e.push_back(w);
          e.push_back(sq[c][i]);
          e.push_back(sq[c][i+1] < 0 ? 0 : sq[c][i+1]);
          i += 2;
          w++;
        end
        checks++;
        if (e != wq[c]) begin
          failures++;
          $display("FAIL column %0d packing: %0d values, exp %0d", c, wq[c].size(), e.size());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
