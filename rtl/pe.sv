// pe: one processing element of the Sense array (MAC, address compute unit,
// Psum buffer, output mux and the cross-PE adder).
//
// Sparse mode (weight-oriented dataflow): the PE keeps one non-zero weight
// W_nz with its kernel location (W_row, W_col). Weight tokens on the row
// pipeline carry a column id; the PE whose COL matches latches the weight.
// Every IFM token (I_nz, I_row, I_col) that follows is multiplied with it and
// the product is added into the Psum buffer at
//   Psum_addr = (I_row - W_row) * W_o + (I_col - W_col),
// skipped when the output location lies outside the H_o x W_o tile. The MAC
// is gated (no buffer write) when either operand is zero or the location is
// invalid. After all input channels of an output block, drain tokens come up
// the column: the PE adds its buffer entry to psum_in, passes the sum up and
// clears the entry (clear-on-read is this design's choice).
//
// Dense mode: the buffer and address unit are gated; each IFM token's product
// is added to psum_in from the PE below and passed up, forming a systolic
// column sum. Only the chain head (bottom row, CHAIN_HEAD=1) computes the
// output address, which travels up with the sum.
//
// Products are 32 bits; bits [FRAC+15:FRAC] are kept, giving the paper's
// 16-bit Psum (the fixed-point position FRAC is not given in the paper; the
// default 0 is integer arithmetic). Timing: tok_out, drain_out and psum_out
// are registered, one cycle after their inputs.
//
// Lint note: verilator reports SYNCASYNCNET on rst_n because the assertion
// at the end samples it synchronously (disable iff) while the flops use it
// as an asynchronous reset; the assertion is not circuit logic.
// The address product is computed 10 bits wide and only its low 6 bits
// (a 64-entry buffer) are used, and bits above the 16-bit Psum of the 32-bit
// product are dropped; verilator reports both as unused bits.
module pe
  import sense_pkg::*;
#(
  parameter int COL        = 0,
  parameter bit CHAIN_HEAD = 1'b0,
  parameter int FRAC       = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sparse_mode,
  input  logic [LOCW:0] cfg_ho,
  input  logic [LOCW:0] cfg_wo,
  input  tok_t          tok_in,
  output tok_t          tok_out,
  input  drain_t        drain_in,
  input  data_t         psum_in,
  output drain_t        drain_out,
  output data_t         psum_out,
  output logic          mac_en
);
  // stationary weight
  data_t           w_nz;
  logic [LOCW-1:0] w_row, w_col;

  logic is_ifm, is_my_wgt;
  assign is_ifm    = tok_in.valid && !tok_in.is_wgt;
  assign is_my_wgt = tok_in.valid && tok_in.is_wgt && (tok_in.col == COLIDW'(COL));

  // address compute unit
  logic signed [LOCW+1:0] prow, pcol;
  logic                   loc_ok;
  logic [PAW-1:0]         addr;
  assign prow   = $signed({2'b00, tok_in.r}) - $signed({2'b00, w_row});
  assign pcol   = $signed({2'b00, tok_in.c}) - $signed({2'b00, w_col});
  assign loc_ok = (prow >= 0) && (pcol >= 0) &&
                  (prow < $signed({1'b0, cfg_ho})) && (pcol < $signed({1'b0, cfg_wo}));
  always_comb begin
    logic [2*LOCW+1:0] a;
    a    = (2*LOCW+2)'(prow[LOCW:0]) * (2*LOCW+2)'(cfg_wo) + (2*LOCW+2)'(pcol[LOCW:0]);
    addr = a[PAW-1:0];
  end

  // MAC with zero / invalid gating
  logic        nz;
  logic [31:0] prod_full;
  data_t       prod;
  assign nz        = (tok_in.data != '0) && (w_nz != '0);
  assign mac_en    = is_ifm && nz && (!sparse_mode || loc_ok);
  assign prod_full = mac_en ? 32'($signed(tok_in.data) * $signed(w_nz)) : 32'd0;
  assign prod      = prod_full[FRAC +: DW];

  // Psum buffer (gated in dense mode)
  logic [PAW-1:0] b_raddr;
  data_t          b_rdata, b_wdata;
  logic           b_we;
  assign b_raddr = drain_in.valid ? drain_in.addr : addr;
  assign b_we    = sparse_mode && (drain_in.valid || mac_en);
  assign b_wdata = drain_in.valid ? data_t'(0) : data_t'(b_rdata + prod);

  psum_buffer #(.DEPTH(PSUM_DEPTH), .W(DW)) u_buf (
    .clk, .rst_n, .en(sparse_mode),
    .raddr(b_raddr), .rdata(b_rdata),
    .we(b_we), .waddr(b_raddr), .wdata(b_wdata)
  );

  // output mux: buffer content (sparse drain) or fresh product (dense)
  data_t mux_out;
  assign mux_out = sparse_mode ? b_rdata : prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_nz      <= '0;
      w_row     <= '0;
      w_col     <= '0;
      tok_out   <= '0;
      drain_out <= '0;
      psum_out  <= '0;
    end else begin
      tok_out <= tok_in;
      if (is_my_wgt) begin
        w_nz  <= tok_in.data;
        w_row <= tok_in.r;
        w_col <= tok_in.c;
      end
      if (sparse_mode) begin
        drain_out <= drain_in;
        psum_out  <= drain_in.valid ? data_t'(psum_in + mux_out) : '0;
      end else begin
        if (CHAIN_HEAD) drain_out <= '{valid: is_ifm && loc_ok, addr: addr};
        else            drain_out <= drain_in;
        psum_out <= data_t'(psum_in + mux_out);
      end
    end
  end

  // drain and compute never overlap: the controller drains only after the
  // row pipelines are empty
  a_no_overlap : assert property (@(posedge clk) disable iff (!rst_n)
                   !(sparse_mode && drain_in.valid && is_ifm));
endmodule
