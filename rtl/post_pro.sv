// post_pro: post-processing of one PE column's output tile: ReLU, then
// optional 2x2 max pooling with stride 2.
//
// The paper names the module and says it performs "ReLU, pooling, etc.";
// the choice of these two operations, the pooling window and the streaming
// form are this design's. Input: the H_o x W_o output tile as a raster-order
// stream (in_valid/in_data), started by a start pulse carrying cfg_ho/cfg_wo.
// Without pooling every element comes out one cycle later. With pooling a
// line buffer keeps the horizontal pair maxima of each even row; the pooled
// value leaves one cycle after the second element of the odd row's pair.
// An odd last row or column is dropped (floor), giving
// floor(H_o/2) x floor(W_o/2) outputs.
module post_pro
  import sense_pkg::*;
#(
  parameter int MAXW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LOCW:0] cfg_ho,
  input  logic [LOCW:0] cfg_wo,
  input  logic          relu_en,
  input  logic          pool_en,
  input  logic          in_valid,
  input  data_t         in_data,
  output logic          out_valid,
  output data_t         out_data
);
  localparam int LW = $clog2(MAXW/2);
  logic [LOCW:0] x, y;
  data_t         hold;
  data_t         line [MAXW/2];
  data_t         v, hmax, vmax;

  function automatic data_t smax(data_t a, data_t b);
    return ($signed(a) > $signed(b)) ? a : b;
  endfunction

  assign v    = (relu_en && in_data[DW-1]) ? data_t'(0) : in_data;
  assign hmax = smax(hold, v);
  assign vmax = smax(line[LW'(x[LOCW:1])], hmax);

  logic in_range;
  assign in_range = ({x[LOCW:1], 1'b1} < cfg_wo) && ({y[LOCW:1], 1'b1} < cfg_ho);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; hold <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        x <= '0; y <= '0;
      end else if (in_valid) begin
        if (x == cfg_wo - 1'b1) begin x <= '0; y <= y + 1'b1; end
        else                         x <= x + 1'b1;
        if (!pool_en) begin
          out_valid <= 1'b1;
          out_data  <= v;
        end else if (!x[0]) begin
          hold <= v;
        end else if (!y[0]) begin
          line[LW'(x[LOCW:1])] <= hmax;
        end else if (in_range) begin
          out_valid <= 1'b1;
          out_data  <= vmax;
        end
      end
    end
  end
endmodule
