// pe_array: N_PE x N_PE systolic array of PEs.
//
// Row r receives the token stream of its I&W buffer; tokens move one PE to the
// right per cycle, so every PE of a row sees the same IFM (the row shares one
// input channel) and each column c latches its own weights (the column works
// on one output channel). Partial sums move up the columns: row 0 is the
// bottom (chain head), row N_PE-1 the top, whose outputs go to the column's
// post-processing module.
//
// Row r's input is delayed by r cycles (input skew), so a token entering all
// rows in the same cycle reaches PE(r,c) at cycle t+r+c, exactly when the
// partial sum from PE(r-1,c) arrives in dense mode. In sparse mode the skew
// only adds latency. Drain tokens (sparse read-out) enter the bottom of every
// column in the same cycle and leave the top N_PE cycles later, with the sum
// over all rows of that Psum address. The skew registers are this design's
// choice; the paper gives the row/column sharing and the upward Psum flow.
module pe_array
  import sense_pkg::*;
#(
  parameter int N_PE = 32,
  parameter int FRAC = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sparse_mode,
  input  logic [LOCW:0] cfg_ho,
  input  logic [LOCW:0] cfg_wo,
  input  tok_t          row_tok  [N_PE],
  input  drain_t        drain_in,
  output drain_t        col_drain [N_PE],
  output data_t         col_psum  [N_PE],
  output logic [N_PE*N_PE-1:0] mac_en
);
  tok_t   tok_h [N_PE][N_PE+1];  // horizontal links
  drain_t dr_v  [N_PE+1][N_PE];  // vertical links
  data_t  ps_v  [N_PE+1][N_PE];

  for (genvar r = 0; r < N_PE; r++) begin : g_skew
    if (r == 0) begin : g_noskew
      assign tok_h[r][0] = row_tok[r];
    end else begin : g_dly
      tok_t dly [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < r; k++) dly[k] <= '0;
        end else begin
          dly[0] <= row_tok[r];
          for (int k = 1; k < r; k++) dly[k] <= dly[k-1];
        end
      end
      assign tok_h[r][0] = dly[r-1];
    end
  end

  for (genvar c = 0; c < N_PE; c++) begin : g_bot
    assign dr_v[0][c] = drain_in;
    assign ps_v[0][c] = '0;
    assign col_drain[c] = dr_v[N_PE][c];
    assign col_psum[c]  = ps_v[N_PE][c];
  end

  for (genvar r = 0; r < N_PE; r++) begin : g_row
    for (genvar c = 0; c < N_PE; c++) begin : g_col
      pe #(.COL(c), .CHAIN_HEAD(r == 0), .FRAC(FRAC)) u_pe (
        .clk, .rst_n, .sparse_mode, .cfg_ho, .cfg_wo,
        .tok_in   (tok_h[r][c]),
        .tok_out  (tok_h[r][c+1]),
        .drain_in (dr_v[r][c]),
        .psum_in  (ps_v[r][c]),
        .drain_out(dr_v[r+1][c]),
        .psum_out (ps_v[r+1][c]),
        .mac_en   (mac_en[r*N_PE+c])
      );
    end
  end
endmodule
