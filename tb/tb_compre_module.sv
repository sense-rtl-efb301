// tb_compre_module: self-checking test of the OFM compression module.
//
// 200 random tiles (1..64 elements, densities from all-zero to all-non-zero)
// are streamed in with random gaps; the emitted half-words must be exactly
// data_length, the bitmap words (element 0 in bit 0) and the NZEs in order,
// with out_last on the final one. In rounds without output backpressure the
// emission must take 1 + ceil(N/16) + N_NZE cycles, one half-word per cycle.
module tb_compre_module;
  import sense_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, in_valid, in_last, in_ready, out_valid, out_last, out_ready, busy;
  data_t in_data, out_data;
  compre_module #(.DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    start = 0; in_valid = 0; in_last = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int n, dens, k, got, first, last_cyc, cyc;
      int vals[$], exp_h[$];
      bit bp;
      vals = {}; exp_h = {};
      n = $urandom_range(1, 64);
      dens = (t % 5 == 0) ? 0 : (t % 5 == 1) ? 100 : int'($urandom_range(0, 100));
      bp = t % 2;
      k = 0;
      for (int i = 0; i < n; i++) begin
        automatic int v = (($urandom % 100) < dens) ? int'($urandom_range(1, 65535)) : 0;
        vals.push_back(v);
        if (v != 0) k++;
      end
      exp_h.push_back(k);
      for (int w = 0; w < (n + 15) / 16; w++) begin
        automatic int word = 0;
        for (int b = 0; b < 16; b++) if (w*16+b < n && vals[w*16+b] != 0) word |= 1 << b;
        exp_h.push_back(word);
      end
      foreach (vals[i]) if (vals[i] != 0) exp_h.push_back(vals[i]);
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      for (int i = 0; i < n; i++) begin
        while ($urandom % 3 == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1; in_data = DW'(vals[i]); in_last = (i == n - 1);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      in_valid = 1'b0; in_last = 1'b0;
      got = 0; cyc = 0; first = -1; last_cyc = -1;
      while (got < exp_h.size() && cyc < 500) begin
        out_ready = bp ? (($urandom % 3) != 0) : 1'b1;
        #1;
        if (out_valid && out_ready) begin
          if (first < 0) first = cyc;
          checks++;
          if (int'(out_data) != exp_h[got] || out_last != (got == exp_h.size() - 1)) begin
            failures++;
            $display("FAIL tile %0d half %0d: got %h last %0d, exp %h", t, got, out_data, out_last, exp_h[got]);
          end
          got++;
          last_cyc = cyc;
        end
        @(negedge clk);
        cyc++;
      end
      out_ready = 1'b0;
      checks++;
      if (got != exp_h.size()) begin failures++; $display("FAIL tile %0d: %0d halves of %0d", t, got, exp_h.size()); end
      if (!bp) begin
        checks++;
        if (last_cyc - first + 1 != 1 + (n + 15) / 16 + k) begin
          failures++; $display("FAIL tile %0d: emission took %0d cycles", t, last_cyc - first + 1);
        end
      end
      while (busy) @(negedge clk);
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
