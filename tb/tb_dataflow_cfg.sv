// tb_dataflow_cfg: self-checking test of the adaptive dataflow configuration.
//
// Checks the three ResNet-50 layers of the reuse-strategy table (sizes with
// K = 1000, on-chip weight capacity 64K): layer-3 fits on chip and uses RIF
// with I + W = 232K; layer-15 chooses RWF with 536K (4.49x below RIF);
// layer-48 chooses RIF. Layer-48's table values differ from the formulas, so
// the expected numbers here are the formulas' (RIF 2.0145M, RWF 2.382M),
// which give the same choice. Then 2000 random cases against a model.
module tb_dataflow_cfg;
  import sense_pkg::*;
  logic [31:0]    i_mem, w_mem, w_cap;
  logic [7:0]     t_row, t_col;
  logic [CHW-1:0] t_oc;
  reuse_e         reuse;
  logic [47:0]    d_rif, d_rwf, d_sel;
  dataflow_cfg dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic layer(string name, longint im, longint wm, int tr, int tc, int toc,
                       reuse_e er, longint esel);
    i_mem = 32'(im); w_mem = 32'(wm); t_row = 8'(tr); t_col = 8'(tc); t_oc = CHW'(toc);
    w_cap = 32'd64000;
    #1;
    chk({name, " strategy"}, longint'(reuse), longint'(er));
    chk({name, " D_mem"}, longint'(d_sel), esel);
  endtask

  initial begin
    layer("layer-3",  196000, 36000,   8, 8, 2,  RIF, 232000);
    layer("layer-15", 98000,  144000,  4, 4, 4,  RWF, 536000);
    chk("layer-15 RIF D_mem", longint'(d_rif), 144000*16 + 98000);
    layer("layer-48", 24500,  1990000, 1, 1, 16, RIF, 2014500);
    chk("layer-48 RWF D_mem", longint'(d_rwf), 24500*16 + 1990000);
    for (int n = 0; n < 2000; n++) begin
      longint im, wm, cap, rif, rwf;
      int tr, tc, toc;
      im = $urandom_range(0, 5000000); wm = $urandom_range(0, 5000000);
      cap = $urandom_range(0, 3000000);
      tr = $urandom_range(1, 64); tc = $urandom_range(1, 64); toc = $urandom_range(1, 128);
      i_mem = 32'(im); w_mem = 32'(wm); w_cap = 32'(cap);
      t_row = 8'(tr); t_col = 8'(tc); t_oc = CHW'(toc);
      #1;
      rwf = im * toc + wm;
      rif = (wm <= cap) ? im + wm : wm * tr * tc + im;
      chk("random RWF", longint'(d_rwf), rwf);
      chk("random RIF", longint'(d_rif), rif);
      chk("random choice", longint'(reuse), (wm <= cap || rif <= rwf) ? 0 : 1);
      chk("random selected", longint'(d_sel), (wm <= cap || rif <= rwf) ? rif : rwf);
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
