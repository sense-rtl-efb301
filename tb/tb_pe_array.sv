// tb_pe_array: self-checking test of the PE array at 4 x 4.
//
// Sparse mode, 10 rounds: every row gets its own random sparse 5 x 5 IFM
// tile, every PE gets two weight steps (one weight each, random location in
// a 3 x 3 kernel, some zero) through the row token streams. After the row
// pipelines empty, a drain of addresses 0..8 must deliver at the top of each
// column the sum over the four rows of that PE's Psum buffer entry, with
// the address. The number of
// active (ungated) MACs must equal the model's count of non-zero, in-range
// products.
// Dense mode: all rows stream the same 25 locations (all-ones bitmap); each
// column must deliver, per in-range location, the sum over rows of
// I_r * W_rc with the right output address.
module tb_pe_array;
  import sense_pkg::*;
  localparam int NP = 4, IH = 5, HO = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic sparse_mode;
  logic [LOCW:0] cfg_ho, cfg_wo;
  tok_t row_tok [NP];
  drain_t drain_in, col_drain [NP];
  data_t col_psum [NP];
  logic [NP*NP-1:0] mac_en;
  pe_array #(.N_PE(NP)) dut (.*);

  int checks = 0, failures = 0, macs = 0;
  always @(posedge clk) macs += $countones(mac_en);

  int ifm [NP][IH*IH];
  int wv [2][NP][NP], wr [2][NP][NP], wc [2][NP][NP];
  int acc [NP][HO*HO];
  int got_a [NP][$], got_v [NP][$];
  always @(posedge clk)
    for (int c = 0; c < NP; c++)
      if (col_drain[c].valid) begin
        got_a[c].push_back(int'(col_drain[c].addr));
        got_v[c].push_back(int'(signed'(col_psum[c])));
      end

  function automatic int s16(int v); return int'(signed'(16'(v))); endfunction

  // send weight step s then the IFM NZEs (dense: all elements) on all rows
  task automatic stream(int s, bit dense);
    int len = 0;
    for (int r = 0; r < NP; r++) begin
      automatic int n = 0;
      for (int p = 0; p < IH*IH; p++) if (dense || ifm[r][p] != 0) n++;
      if (n > len) len = n;
    end
    for (int c = 0; c < NP; c++) begin
      @(negedge clk);
      for (int r = 0; r < NP; r++) begin
        row_tok[r] = '0; row_tok[r].valid = 1'b1; row_tok[r].is_wgt = 1'b1;
        row_tok[r].col = COLIDW'(c); row_tok[r].data = DW'(wv[s][r][c]);
        row_tok[r].r = LOCW'(wr[s][r][c]); row_tok[r].c = LOCW'(wc[s][r][c]);
      end
    end
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      for (int r = 0; r < NP; r++) begin
        automatic int seen = 0;
        row_tok[r] = '0;
        for (int p = 0; p < IH*IH; p++)
          if (dense || ifm[r][p] != 0) begin
            if (seen == k) begin
              row_tok[r].valid = 1'b1; row_tok[r].data = DW'(ifm[r][p]);
              row_tok[r].r = LOCW'(p / IH); row_tok[r].c = LOCW'(p % IH);
            end
            seen++;
          end
      end
    end
    @(negedge clk);
    for (int r = 0; r < NP; r++) row_tok[r] = '0;
    repeat (2*NP + 4) @(negedge clk);
  endtask

  initial begin
    sparse_mode = 1'b1; cfg_ho = HO; cfg_wo = HO; drain_in = '0;
    for (int r = 0; r < NP; r++) row_tok[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 10; round++) begin
      automatic int exp_macs = 0;
      for (int c = 0; c < NP; c++) for (int a = 0; a < HO*HO; a++) acc[c][a] = 0;
      for (int r = 0; r < NP; r++)
        for (int p = 0; p < IH*IH; p++) ifm[r][p] = ($urandom % 2) ? int'($urandom_range(0, 40)) - 20 : 0;
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < NP; r++)
          for (int c = 0; c < NP; c++) begin
            wv[s][r][c] = ($urandom % 5 == 0) ? 0 : int'($urandom_range(1, 30)) - 15;
            wr[s][r][c] = $urandom_range(0, 2); wc[s][r][c] = $urandom_range(0, 2);
            for (int p = 0; p < IH*IH; p++) begin
              automatic int pr = p / IH - wr[s][r][c], pc = p % IH - wc[s][r][c];
              if (pr >= 0 && pc >= 0 && pr < HO && pc < HO && ifm[r][p] != 0 && wv[s][r][c] != 0) begin
                acc[c][pr*HO+pc] = s16(acc[c][pr*HO+pc] + ifm[r][p] * wv[s][r][c]);
                exp_macs++;
              end
            end
          end
      macs = 0;
      stream(0, 1'b0);
      stream(1, 1'b0);
      checks++;
      if (macs != exp_macs) begin failures++; $display("FAIL round %0d: %0d MACs, exp %0d", round, macs, exp_macs); end
      for (int c = 0; c < NP; c++) begin got_a[c] = {}; got_v[c] = {}; end
      for (int a = 0; a < HO*HO; a++) begin
        @(negedge clk); drain_in.valid = 1'b1; drain_in.addr = PAW'(a);
      end
      @(negedge clk); drain_in = '0;
      repeat (NP + 2) @(negedge clk);
      for (int c = 0; c < NP; c++) begin
        checks++;
        if (got_a[c].size() != HO*HO) begin
          failures++; $display("FAIL round %0d column %0d: %0d drained", round, c, got_a[c].size());
        end else
          for (int a = 0; a < HO*HO; a++) begin
            checks++;
            if (got_a[c][a] != a || got_v[c][a] != acc[c][a]) begin
              failures++;
              $display("FAIL round %0d column %0d addr %0d: got %0d @%0d exp %0d", round, c, a, got_v[c][a], got_a[c][a], acc[c][a]);
            end
          end
      end
    end
    // ---- dense mode ----
    sparse_mode = 1'b0;
    for (int round = 0; round < 5; round++) begin
      for (int r = 0; r < NP; r++)
        for (int p = 0; p < IH*IH; p++) ifm[r][p] = int'($urandom_range(0, 40)) - 20;
      for (int r = 0; r < NP; r++)
        for (int c = 0; c < NP; c++) begin
          wv[0][r][c] = int'($urandom_range(0, 30)) - 15; wr[0][r][c] = 1; wc[0][r][c] = 2;
        end
      for (int c = 0; c < NP; c++) begin got_a[c] = {}; got_v[c] = {}; end
      stream(0, 1'b1);
      for (int c = 0; c < NP; c++) begin
        automatic int k = 0;
        for (int p = 0; p < IH*IH; p++) begin
          automatic int pr = p / IH - 1, pc = p % IH - 2;
          if (pr >= 0 && pc >= 0 && pr < HO && pc < HO) begin
            automatic int e = 0;
            for (int r = 0; r < NP; r++) e += ifm[r][p] * wv[0][r][c];
            checks++;
            if (k >= got_a[c].size() || got_a[c][k] != pr*HO+pc || got_v[c][k] != s16(e)) begin
              failures++;
              $display("FAIL dense round %0d column %0d output %0d", round, c, k);
            end
            k++;
          end
        end
        checks++;
        if (got_a[c].size() != k) begin failures++; $display("FAIL dense column %0d: %0d outputs exp %0d", c, got_a[c].size(), k); end
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
