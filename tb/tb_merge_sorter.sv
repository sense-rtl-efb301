// tb_merge_sorter: self-checking test of the ranking unit (32 keys).
//
// First the clustering example: NZE counts 8, 4, 8, 3 (padded with zeros)
// must rank as channels 0, 2, 1, 3 (descending, ties keep channel order).
// Then 300 random key sets, many with ties, against a stable descending
// sort. Each sort must finish in N * log2(N) = 160 cycles after the start
// cycle (done pulses with the last merge step).
module tb_merge_sorter;
  localparam int N = 32, KW = 16, IW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [KW-1:0] keys [N];
  logic [IW-1:0] idx  [N];
  merge_sorter #(.N(N), .KW(KW)) dut (.*);

  int checks = 0, failures = 0;

  task automatic run(int k[N], string name);
    int exp_i[$];
    bit used[N];
    int cyc;
    for (int i = 0; i < N; i++) begin keys[i] = KW'(k[i]); used[i] = 0; end
    for (int p = 0; p < N; p++) begin
      automatic int best = -1;
      for (int i = 0; i < N; i++) if (!used[i] && (best < 0 || k[i] > k[best])) best = i;
      used[best] = 1;
      exp_i.push_back(best);
    end
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int i = 0; i < N; i++) keys[i] = '1;       // keys are sampled at start
    cyc = 1;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    // cyc counts the start cycle, then one per merge step
    if (cyc != N * IW + 1) begin failures++; $display("FAIL %s: %0d cycles", name, cyc); end
    for (int p = 0; p < N; p++) begin
      checks++;
      if (int'(idx[p]) != exp_i[p]) begin
        failures++;
        $display("FAIL %s rank %0d: got %0d exp %0d", name, p, idx[p], exp_i[p]);
      end
    end
  endtask

  initial begin
    int k[N];
    start = 0;
    for (int i = 0; i < N; i++) keys[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) k[i] = 0;
    k[0] = 8; k[1] = 4; k[2] = 8; k[3] = 3;
    run(k, "example");
    for (int t = 0; t < 300; t++) begin
      automatic int range = (t % 3 == 0) ? 4 : 65535;
      for (int i = 0; i < N; i++) k[i] = $urandom_range(0, range);
      run(k, "random");
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
