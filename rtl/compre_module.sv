// compre_module: compresses one OFM tile of a PE column into the bitmap
// format that the next layer's I&W buffers read back:
//   data_length (number of NZEs), bitmap words, NZEs.
// Bit i of the bitmap is element i of the tile in raster order, 1 for
// non-zero, packed 16 per word with element 0 in bit 0 of the first word
// (as in the paper's compression figures). The NZEs are parked in a
// 64 x 16b LUT RAM, the storage the paper names for this module.
//
// Interface: pulse start, then stream the tile (in_valid, in_data, in_last on
// the final element; in_ready is high while absorbing). After in_last the
// module emits 1 + ceil(N/16) + N_NZE half-words on out_valid/out_data with
// out_ready backpressure, out_last on the final one, and returns to idle.
module compre_module
  import sense_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_valid,
  input  data_t in_data,
  input  logic  in_last,
  output logic  in_ready,
  output logic  out_valid,
  output data_t out_data,
  output logic  out_last,
  input  logic  out_ready,
  output logic  busy
);
  localparam int AW  = $clog2(DEPTH);
  localparam int NBW = DEPTH / 16;

  typedef enum logic [1:0] {S_IDLE, S_ABSORB, S_EMIT} state_e;
  state_e           st;
  logic [DEPTH-1:0] bmp;
  data_t            nzm [DEPTH];
  logic [AW:0]      n, k;       // elements seen, NZEs kept
  logic [AW+1:0]    e, total;   // emit index, words to emit
  logic [AW:0]      nbm;

  assign in_ready  = (st == S_ABSORB);
  assign out_valid = (st == S_EMIT);
  assign busy      = (st != S_IDLE);
  assign nbm       = (n + (AW+1)'(15)) >> 4;
  assign total     = (AW+2)'(1) + (AW+2)'(nbm) + (AW+2)'(k);
  assign out_last  = out_valid && (e == total - 1'b1);

  always_comb begin
    logic [$clog2(NBW)-1:0] bi;
    logic [AW-1:0]          ni;
    bi = $clog2(NBW)'(e - 1'b1);
    ni = AW'(e - 1'b1 - (AW+2)'(nbm));
    if (e == 0)                          out_data = data_t'(k);
    else if (e <= (AW+2)'(nbm))          out_data = bmp[bi*16 +: 16];
    else                                 out_data = nzm[ni];
  end

  always_ff @(posedge clk) begin
    if (st == S_ABSORB && in_valid && in_data != '0) nzm[k[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bmp <= '0; n <= '0; k <= '0; e <= '0;
    end else begin
      if (start) begin
        st <= S_ABSORB; bmp <= '0; n <= '0; k <= '0; e <= '0;
      end else begin
        unique case (st)
          S_ABSORB: if (in_valid) begin
            n <= n + 1'b1;
            if (in_data != '0) begin
              bmp[n[AW-1:0]] <= 1'b1;
              k <= k + 1'b1;
            end
            if (in_last) st <= S_EMIT;
          end
          S_EMIT: if (out_ready) begin
            e <= e + 1'b1;
            if (out_last) st <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
