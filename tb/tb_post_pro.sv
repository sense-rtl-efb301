// tb_post_pro: self-checking test of the post-processing module.
//
// 60 random OFM tiles (1..16 x 1..16, random signs) are streamed in raster
// order with random gaps, with ReLU and 2x2 / stride-2 max pooling switched
// on and off. The outputs must equal the reference, in raster order: all
// elements (ReLU only) or floor(H/2) x floor(W/2) pooled elements.
module tb_post_pro;
  import sense_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, relu_en, pool_en, in_valid, out_valid;
  logic [LOCW:0] cfg_ho, cfg_wo;
  data_t in_data, out_data;
  post_pro #(.MAXW(16)) dut (.*);

  int checks = 0, failures = 0;
  int got[$];
  always @(posedge clk) if (out_valid) got.push_back(int'(signed'(out_data)));

  initial begin
    start = 0; relu_en = 0; pool_en = 0; in_valid = 0; in_data = 0; cfg_ho = 1; cfg_wo = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int h, w;
      int v [16][16];
      int exp_q[$];
      exp_q = {};
      h = $urandom_range(1, 16); w = $urandom_range(1, 16);
      relu_en = t[0]; pool_en = t[1];
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          v[y][x] = int'($urandom_range(0, 2000)) - 1000;
          if (relu_en && v[y][x] < 0) v[y][x] = 0;
        end
      if (!pool_en) begin
        for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) exp_q.push_back(v[y][x]);
      end else begin
        for (int y = 0; y < h / 2; y++)
          for (int x = 0; x < w / 2; x++) begin
            automatic int m = v[2*y][2*x];
            if (v[2*y][2*x+1] > m) m = v[2*y][2*x+1];
            if (v[2*y+1][2*x] > m) m = v[2*y+1][2*x];
            if (v[2*y+1][2*x+1] > m) m = v[2*y+1][2*x+1];
            exp_q.push_back(m);
          end
      end
      got = {};
      @(negedge clk); cfg_ho = (LOCW+1)'(h); cfg_wo = (LOCW+1)'(w); start = 1'b1;
      @(negedge clk); start = 1'b0;
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          automatic int raw = v[y][x];
          // feed the raw value; ReLU is applied by the module
          if (relu_en && raw == 0 && ($urandom % 2)) raw = -int'($urandom_range(1, 500));
          while ($urandom % 4 == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1; in_data = DW'(raw);
          @(negedge clk);
        end
      in_valid = 1'b0;
      repeat (3) @(negedge clk);
      checks++;
      if (got.size() != exp_q.size()) begin
        failures++; $display("FAIL tile %0d (%0dx%0d relu %0d pool %0d): %0d outputs, exp %0d",
                             t, h, w, relu_en, pool_en, got.size(), exp_q.size());
      end else begin
        foreach (exp_q[i]) begin
          checks++;
          if (got[i] != exp_q[i]) begin
            failures++; $display("FAIL tile %0d output %0d: %0d exp %0d", t, i, got[i], exp_q[i]);
          end
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
