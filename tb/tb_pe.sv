// tb_pe: self-checking test of one processing element.
//
// 1. The worked example of the sparse computing flow: W_o = H_o = 3, IFM
//    NZEs 10, 20, 30, 40 at (0,0) (1,1) (2,2) (3,3), weight NZEs 10, 20 at
//    (0,0) (1,1). Eight IFM cycles, of which two are out of bounds and gated;
//    the Psum buffer must then hold 500 @0, 800 @4, 1100 @8 (computed with the
//    address formula Psum_row * W_o + Psum_col), read out by a drain pass that
//    also clears the entries.
// 2. Random sparse traffic against a reference model (weights for this and
//    other columns, zero operands, out-of-range locations), then a drain of
//    every address with random incoming partial sums.
// 3. Dense mode: psum_out = psum_in + product one cycle later, and the chain
//    head issues a drain address for every in-range IFM token.
// The one-cycle latency of tok_out, psum_out and drain_out is checked.
module tb_pe;
  import sense_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          sparse_mode, mac_en;
  logic [LOCW:0] cfg_ho, cfg_wo;
  tok_t          tok_in, tok_out;
  drain_t        drain_in, drain_out;
  data_t         psum_in, psum_out;

  pe #(.COL(3), .CHAIN_HEAD(1'b1)) dut (.*);

  int checks = 0, failures = 0, macs = 0;
  always @(posedge clk) if (mac_en) macs++;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic tok_t wtok(int col, int v, int r, int c);
    tok_t t;
    t = '0; t.valid = 1'b1; t.is_wgt = 1'b1; t.col = COLIDW'(col);
    t.data = DW'(v); t.r = LOCW'(r); t.c = LOCW'(c);
    return t;
  endfunction
  function automatic tok_t itok(int v, int r, int c);
    tok_t t;
    t = '0; t.valid = 1'b1; t.data = DW'(v); t.r = LOCW'(r); t.c = LOCW'(c);
    return t;
  endfunction

  // apply one input for one clock; inputs change at negedge
  task automatic step(tok_t t, drain_t d, data_t p);
    @(negedge clk);
    tok_in = t; drain_in = d; psum_in = p;
    @(posedge clk);
    #1;
    checks++;
    if (tok_out !== t) begin failures++; $display("FAIL tok_out latency"); end
  endtask

  task automatic drain(int addr, int pin, int exp);
    drain_t d;
    d.valid = 1'b1; d.addr = PAW'(addr);
    step('0, d, DW'(pin));
    chk($sformatf("drain addr %0d", addr), int'(signed'(psum_out)), exp);
    chk("drain address forwarded", int'(drain_out.addr), addr);
  endtask

  int model [PSUM_DEPTH];
  int wv, wr, wc;

  initial begin
    tok_in = '0; drain_in = '0; psum_in = '0; sparse_mode = 1'b1;
    cfg_ho = 3; cfg_wo = 3;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1: worked example ----
    step(wtok(3, 10, 0, 0), '0, '0);
    step(wtok(5, 99, 2, 2), '0, '0);          // weight of another column: ignored
    macs = 0;
    step(itok(10, 0, 0), '0, '0);
    step(itok(20, 1, 1), '0, '0);
    step(itok(30, 2, 2), '0, '0);
    step(itok(40, 3, 3), '0, '0);
    step(wtok(3, 20, 1, 1), '0, '0);
    step(itok(10, 0, 0), '0, '0);
    step(itok(20, 1, 1), '0, '0);
    step(itok(30, 2, 2), '0, '0);
    step(itok(40, 3, 3), '0, '0);
    chk("valid MACs in example (2 of 8 gated)", macs, 6);
    drain(0, 0, 500);
    drain(4, 7, 807);
    drain(8, 0, 1100);
    drain(1, 0, 0);
    drain(0, 0, 0);                           // cleared by the first drain

    // ---- 2: random sparse traffic ----
    // the PE keeps its weight across rounds: start from the example's last one
    wv = 20; wr = 1; wc = 1;
    for (int round = 0; round < 20; round++) begin
      cfg_ho = LOCW'($urandom_range(1, 8)); cfg_wo = LOCW'($urandom_range(1, 8));
      for (int a = 0; a < PSUM_DEPTH; a++) model[a] = 0;
      for (int i = 0; i < 60; i++) begin
        automatic int k = $urandom % 4;
        if (k == 0) begin
          automatic int col = ($urandom % 2) ? 3 : 7;
          automatic int v = ($urandom % 4 == 0) ? 0 : int'($urandom_range(0, 200)) - 100;
          automatic int r = $urandom_range(0, 3), c = $urandom_range(0, 3);
          step(wtok(col, v, r, c), '0, '0);
          if (col == 3) begin wv = v; wr = r; wc = c; end
        end else begin
          automatic int v = ($urandom % 4 == 0) ? 0 : int'($urandom_range(0, 200)) - 100;
          automatic int r = $urandom_range(0, 11), c = $urandom_range(0, 11);
          automatic int pr = r - wr, pc = c - wc;
          step(itok(v, r, c), '0, '0);
          if (pr >= 0 && pc >= 0 && pr < cfg_ho && pc < cfg_wo && v != 0 && wv != 0)
            model[pr*cfg_wo + pc] = int'(signed'(16'(model[pr*cfg_wo + pc] + v*wv)));
        end
      end
      for (int a = 0; a < cfg_ho*cfg_wo; a++) begin
        automatic int pin = int'($urandom_range(0, 100));
        drain(a, pin, int'(signed'(16'(pin + model[a]))));
      end
    end

    // ---- 3: dense mode ----
    sparse_mode = 1'b0; cfg_ho = 3; cfg_wo = 3;
    step(wtok(3, -7, 1, 0), '0, '0);
    for (int i = 0; i < 30; i++) begin
      automatic int v = int'($urandom_range(0, 100)) - 50, r = $urandom_range(0, 4), c = $urandom_range(0, 4);
      automatic int pin = int'($urandom_range(0, 1000));
      automatic bit inb = (r - 1 >= 0) && (r - 1 < 3) && (c < 3);
      step(itok(v, r, c), '0, DW'(pin));
      chk("dense psum_out", int'(signed'(psum_out)), pin + v * (-7));
      chk("dense drain valid", int'(drain_out.valid), int'(inb));
      if (inb) chk("dense drain addr", int'(drain_out.addr), (r-1)*3 + c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
