// dataflow_cfg: Adaptive Dataflow Configuration. For one layer it estimates
// the DRAM traffic of the two loop orders and picks the smaller:
//   Reuse-IFM-First (RIF): D = W_mem * T_ifm_row * T_ifm_col + I_mem
//   Reuse-Weight-First (RWF): D = I_mem * T_oc + W_mem
// and, when all weights of the layer fit on chip (W_mem <= w_cap), RIF with
// D = I_mem + W_mem. Ties choose RIF. The formulas are the paper's; the
// paper prints the RIF product once as T_ifm_row x T_ifm_row, but describes
// it in words as T_ifm_col x T_ifm_row accesses, which is what is used here.
// Sizes are in any common unit (words or bytes). Purely combinational.
module dataflow_cfg
  import sense_pkg::*;
(
  input  logic [31:0]    i_mem,
  input  logic [31:0]    w_mem,
  input  logic [7:0]     t_row,
  input  logic [7:0]     t_col,
  input  logic [CHW-1:0] t_oc,
  input  logic [31:0]    w_cap,
  output reuse_e         reuse,
  output logic [47:0]    d_rif,
  output logic [47:0]    d_rwf,
  output logic [47:0]    d_sel
);
  logic fits;
  assign fits  = (w_mem <= w_cap);
  assign d_rif = fits ? 48'(i_mem) + 48'(w_mem)
                      : 48'(w_mem) * 48'(t_row) * 48'(t_col) + 48'(i_mem);
  assign d_rwf = 48'(i_mem) * 48'(t_oc) + 48'(w_mem);
  assign reuse = (fits || d_rif <= d_rwf) ? RIF : RWF;
  assign d_sel = (reuse == RIF) ? d_rif : d_rwf;
endmodule
