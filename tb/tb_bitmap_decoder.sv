// tb_bitmap_decoder: self-checking test of the bitmap decompressing unit.
//
// 300 random tiles (1..256 elements, width 1..16 with at most 16 rows, random density including
// all-zero and all-ones bitmaps) are decoded, with the word supply stalling
// at random in half of the tiles. The list of (row, col) locations must equal
// the set bits in row-major order, and done must pulse exactly once. Without
// stalls the decode must take nbits + ceil(nbits / 16) cycles (one bit per
// cycle plus one cycle per word fetch).
module tb_bitmap_decoder;
  import sense_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            start, in_valid, in_ready, loc_valid, done, busy;
  logic [8:0]      nbits;
  logic [LOCW:0]   width;
  logic [15:0]     in_word;
  logic [LOCW-1:0] loc_r, loc_c;
  bitmap_decoder dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] words [16];
  int got_r[$], got_c[$];
  int ndone;
  bit stall;

  always @(posedge clk) begin
    if (loc_valid) begin got_r.push_back(int'(loc_r)); got_c.push_back(int'(loc_c)); end
    if (done) ndone++;
  end

  // word source
  int wi;
  always @(posedge clk) begin
    if (start) wi <= 0;
    else if (in_valid && in_ready) wi <= wi + 1;
  end
  always_comb in_word = words[wi[3:0]];
  always @(negedge clk) in_valid <= stall ? (($urandom % 3) != 0) : 1'b1;

  initial begin
    start = 1'b0; nbits = '0; width = '0; stall = 1'b0; wi = 0; ndone = 0;
    for (int i = 0; i < 16; i++) words[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int n, w, dens, cyc, nw;
      int er[$], ec[$];
      er = {}; ec = {};
      n    = (t < 5) ? t * 64 : int'($urandom_range(1, 256));
      w    = $urandom_range((n + 15) / 16 > 0 ? (n + 15) / 16 : 1, 16);  // at most 16 rows
      dens = (t % 7 == 0) ? 0 : (t % 7 == 1) ? 100 : int'($urandom_range(0, 100));
      for (int i = 0; i < 16; i++) words[i] = '0;
      for (int i = 0; i < n; i++)
        if (($urandom % 100) < dens) begin
          words[i/16][i%16] = 1'b1;
          er.push_back(i / w); ec.push_back(i % w);
        end
      stall = t % 2;
      got_r = {}; got_c = {}; ndone = 0;
      @(negedge clk);
      start = 1'b1; nbits = 9'(n); width = (LOCW+1)'(w);
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (ndone == 0 && cyc < 2000) begin @(negedge clk); cyc++; end
      repeat (3) @(negedge clk);
      checks++;
      if (got_r.size() != er.size()) begin
        failures++; $display("FAIL tile %0d: %0d locations, exp %0d", t, got_r.size(), er.size());
      end else begin
        foreach (er[i]) if (got_r[i] != er[i] || got_c[i] != ec[i]) begin
          failures++; $display("FAIL tile %0d loc %0d: (%0d,%0d) exp (%0d,%0d)", t, i, got_r[i], got_c[i], er[i], ec[i]);
          break;
        end
      end
      checks++;
      if (ndone != 1) begin failures++; $display("FAIL tile %0d: done pulsed %0d times", t, ndone); end
      nw = (n + 15) / 16;
      if (!stall && n > 0) begin
        checks++;
        // cyc counts the start cycle and the cycle in which done is seen
        if (cyc - 2 != n + nw) begin failures++; $display("FAIL tile %0d: %0d cycles, exp %0d", t, cyc - 2, n + nw); end
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
