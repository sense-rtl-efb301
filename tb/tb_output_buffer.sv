// tb_output_buffer: self-checking test of one column's ping-pong OFM buffer.
//
// 30 rounds: a random tile (1..64 elements, some zero) is written
// sequentially into one bank while the other bank, filled in the previous
// round, is streamed out under random rd_ready backpressure. Every element,
// rd_last and the reported NZE count are compared with the model. Every
// third round uses the dense-mode accumulate port instead (random adds to
// random addresses), and unwritten entries must read zero after clr.
module tb_output_buffer;
  import sense_pkg::*;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_bank, clr, wr_valid, acc_valid, rd_start, rd_bank, rd_valid, rd_last, rd_ready, nz_valid;
  data_t wr_data, acc_data, rd_data;
  logic [AW-1:0] acc_addr;
  logic [AW:0] rd_len, nz_count;
  output_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int model [2][DEPTH];
  int mlen [2];

  task automatic fill(bit b, bit dense);
    automatic int n = $urandom_range(1, DEPTH);
    @(negedge clk); wr_bank = b; clr = 1'b1;
    @(negedge clk); clr = 1'b0;
    for (int i = 0; i < DEPTH; i++) model[b][i] = 0;
    mlen[b] = n;
    if (!dense) begin
      for (int i = 0; i < n; i++) begin
        automatic int v = ($urandom % 3 == 0) ? 0 : int'($urandom_range(0, 65535));
        wr_valid = 1'b1; wr_data = DW'(v); model[b][i] = v;
        @(negedge clk);
        wr_valid = 1'b0;
        if ($urandom % 2) @(negedge clk);
      end
    end else begin
      for (int k = 0; k < 3 * n; k++) begin
        automatic int a = $urandom_range(0, n - 1), v = $urandom_range(0, 300);
        acc_valid = 1'b1; acc_addr = AW'(a); acc_data = DW'(v);
        model[b][a] = (model[b][a] + v) & 16'hffff;
        @(negedge clk);
        acc_valid = 1'b0;
      end
    end
  endtask

  task automatic drain(bit b);
    automatic int k = 0, nz = 0, got_nz = -1, cyc = 0;
    for (int i = 0; i < mlen[b]; i++) if (model[b][i] != 0) nz++;
    @(negedge clk); rd_bank = b; rd_len = (AW+1)'(mlen[b]); rd_start = 1'b1;
    @(negedge clk); rd_start = 1'b0;
    while (got_nz < 0 && cyc < 1000) begin
      rd_ready = ($urandom % 4) != 0;
      #1;
      if (nz_valid) got_nz = int'(nz_count);
      if (rd_valid && rd_ready) begin
        checks++;
        if (k >= mlen[b] || int'(rd_data) != model[b][k] || rd_last != (k == mlen[b] - 1)) begin
          failures++;
          $display("FAIL bank %0d element %0d: got %0d last %0d", b, k, rd_data, rd_last);
        end
        k++;
      end
      @(negedge clk);
      cyc++;
    end
    rd_ready = 1'b0;
    checks++;
    if (k != mlen[b] || got_nz != nz) begin
      failures++;
      $display("FAIL bank %0d: %0d elements (exp %0d), nz %0d (exp %0d)", b, k, mlen[b], got_nz, nz);
    end
  endtask

  initial begin
    wr_bank = 0; clr = 0; wr_valid = 0; wr_data = 0; acc_valid = 0; acc_addr = 0; acc_data = 0;
    rd_start = 0; rd_bank = 0; rd_len = 0; rd_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fill(1'b0, 1'b0);
    for (int r = 0; r < 30; r++) begin
      automatic bit b = r[0];
      fork
        drain(b);
        fill(!b, (r % 3) == 2);
      join
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
