// tb_psum_buffer: self-checking test of the per-PE partial-sum store.
//
// Drives 2000 random cycles of read / write traffic against a reference
// array model. Checks that every entry reads zero after reset until written,
// that writes land one cycle later (asynchronous read of the new value on the
// next cycle), that a read-modify-write at one address per cycle accumulates
// (the access pattern of a PE), and that en = 0 blocks writes.
module tb_psum_buffer;
  localparam int DEPTH = 64, W = 16, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          en, we;
  logic [AW-1:0] raddr, waddr;
  logic [W-1:0]  rdata, wdata;
  psum_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [DEPTH];

  task automatic chk(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    en = 1'b1; we = 1'b0; raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      raddr = AW'(i); #1;
      chk("zero after reset", rdata, '0);
    end
    // read-modify-write accumulation at one address per cycle
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(0, 7));
      waddr = raddr;
      #1;
      chk("rmw read", rdata, model[raddr]);
      wdata = rdata + W'($urandom_range(0, 1000));
      we    = 1'b1;
      en    = 1'b1;
      @(posedge clk);
      model[waddr] = wdata;
      #1 we = 1'b0;
    end
    // random traffic including gated cycles
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en    = ($urandom % 5) != 0;
      we    = $urandom % 2;
      waddr = AW'($urandom);
      wdata = W'($urandom);
      raddr = AW'($urandom);
      #1;
      chk("random read", rdata, model[raddr]);
      @(posedge clk);
      if (en && we) model[waddr] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      raddr = AW'(i); #1;
      chk("final contents", rdata, model[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
