// iw_buffer: the I&W buffer of one PE row. It holds the compressed IFM tile of
// one input channel and the N_PE kernels (one per PE column) that this
// channel meets, decompresses their bitmaps into location info, and replays
// them to the row as a token stream in the weight-oriented order.
//
// Storage, as the paper lists it: one memory for IFM/weight NZEs and one for
// location info, each doubled into two banks used ping-pong (one bank is
// loaded from DRAM while the other feeds the PEs), plus the decompressing
// unit (bitmap_decoder). Here the IFM and weight parts are separate arrays:
// IMAX IFM NZEs and N_PE x KMAX weight NZEs per bank.
//
// Load side: pulse ld_start with ld_bank, ld_is_wgt and ld_col (kernel slot),
// then stream the compressed block as 16-bit halves with ld_valid/ld_ready:
// data_length, bitmap words (ceil(H*W/16)), then the NZEs. ld_clr_ifm /
// ld_clr_w set the lengths of a bank to zero (channels or kernels that do
// not exist read as empty).
//
// Read side: pulse rd_start with rd_bank, nzei_max and nzew_max. For each
// weight step f < nzew_max the buffer sends N_PE weight tokens (column c gets
// its kernel's f-th NZE, or a zero weight when the kernel has fewer), then
// nzei_max IFM slots (the first N_NZEI carry this row's NZEs, the rest are
// empty slots so all rows keep the same tempo). One token per cycle, so a
// pass takes nzew_max * (N_PE + nzei_max) cycles; rd_done pulses with the
// last token. Sending weights as tokens on the row pipeline is this design's
// choice; the paper does not say how weights reach the PEs.
//
// Lint note: the decoder's busy output is not needed here (the load FSM
// tracks the bitmap phase itself) and is reported as unused.
module iw_buffer
  import sense_pkg::*;
#(
  parameter int N_PE = 32,
  parameter int IMAX = 256,   // IFM NZEs per bank (16 x 16 tile)
  parameter int KMAX = 32     // NZEs per kernel (up to 5 x 5 dense)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LOCW:0] cfg_ih,
  input  logic [LOCW:0] cfg_iw,
  input  logic [LOCW:0] cfg_kh,
  input  logic [LOCW:0] cfg_kw,
  // load side (DRAM)
  input  logic          ld_bank,
  input  logic          ld_start,
  input  logic          ld_is_wgt,
  input  logic [COLIDW-1:0] ld_col,
  input  logic          ld_valid,
  input  logic [DW-1:0] ld_data,
  output logic          ld_ready,
  output logic          ld_busy,
  input  logic          ld_clr_ifm,
  input  logic          ld_clr_w,
  output logic [8:0]    ifm_len [2],
  // read side (PE row)
  input  logic          rd_bank,
  input  logic          rd_start,
  input  logic [8:0]    nzei_max,
  input  logic [7:0]    nzew_max,
  output tok_t          tok,
  output logic          rd_busy,
  output logic          rd_done
);
  localparam int IAW = $clog2(IMAX);
  localparam int KAW = $clog2(KMAX);
  localparam int CIW = $clog2(N_PE);
  localparam int WAW = $clog2(N_PE*KMAX);

  data_t             ifm_data [2*IMAX];
  logic [2*LOCW-1:0] ifm_loc  [2*IMAX];
  data_t             w_data   [2*N_PE*KMAX];
  logic [2*LOCW-1:0] w_loc    [2*N_PE*KMAX];
  logic [KAW:0]      w_len    [2][N_PE];

  // ---------------- load side ----------------
  typedef enum logic [1:0] {L_IDLE, L_LEN, L_BMP, L_NZE} lstate_e;
  lstate_e       ls;
  logic          cb, cw;
  logic [COLIDW-1:0] ccol;
  logic [8:0]    clen, widx, lidx;

  logic          dec_start, dec_in_ready, dec_loc_valid, dec_done, dec_busy;
  logic [LOCW-1:0] dec_r, dec_c;
  logic [8:0]    nbits;
  logic [LOCW:0] width;
  assign nbits = cw ? 9'(cfg_kh * cfg_kw) : 9'(cfg_ih * cfg_iw);
  assign width = cw ? cfg_kw : cfg_iw;

  assign dec_start = (ls == L_LEN) && ld_valid;
  assign ld_ready  = (ls == L_LEN) || (ls == L_NZE) || ((ls == L_BMP) && dec_in_ready);
  assign ld_busy   = (ls != L_IDLE);

  bitmap_decoder u_dec (
    .clk, .rst_n, .start(dec_start), .nbits, .width,
    .in_valid(ls == L_BMP && ld_valid), .in_word(ld_data), .in_ready(dec_in_ready),
    .loc_valid(dec_loc_valid), .loc_r(dec_r), .loc_c(dec_c), .done(dec_done), .busy(dec_busy)
  );

  function automatic logic [WAW-1:0] widx_f(logic [COLIDW-1:0] col, logic [8:0] i);
    return WAW'(col) * WAW'(KMAX) + WAW'(i);
  endfunction

  always_ff @(posedge clk) begin
    if (dec_loc_valid) begin
      if (cw) w_loc[{cb, widx_f(ccol, lidx)}] <= {dec_r, dec_c};
      else    ifm_loc[{cb, lidx[IAW-1:0]}]    <= {dec_r, dec_c};
    end
    if (ls == L_NZE && ld_valid) begin
      if (cw) w_data[{cb, widx_f(ccol, widx)}] <= ld_data;
      else    ifm_data[{cb, widx[IAW-1:0]}]    <= ld_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= L_IDLE; cb <= 1'b0; cw <= 1'b0; ccol <= '0;
      clen <= '0; widx <= '0; lidx <= '0;
      ifm_len[0] <= '0; ifm_len[1] <= '0;
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < N_PE; c++) w_len[b][c] <= '0;
    end else begin
      if (ld_clr_ifm) ifm_len[ld_bank] <= '0;
      if (ld_clr_w) for (int c = 0; c < N_PE; c++) w_len[ld_bank][c] <= '0;
      if (dec_loc_valid) lidx <= lidx + 1'b1;
      unique case (ls)
        L_IDLE: if (ld_start) begin
          ls <= L_LEN; cb <= ld_bank; cw <= ld_is_wgt; ccol <= ld_col;
        end
        L_LEN: if (ld_valid) begin
          clen <= ld_data[8:0];
          widx <= '0; lidx <= '0;
          if (cw) w_len[cb][CIW'(ccol)] <= ld_data[KAW:0];
          else    ifm_len[cb]     <= ld_data[8:0];
          ls <= L_BMP;
        end
        L_BMP: if (dec_done) ls <= (clen == 0) ? L_IDLE : L_NZE;
        L_NZE: if (ld_valid) begin
          widx <= widx + 1'b1;
          if (widx == clen - 1'b1) ls <= L_IDLE;
        end
        default: ls <= L_IDLE;
      endcase
    end
  end

  // ---------------- read side ----------------
  typedef enum logic [1:0] {R_IDLE, R_WGT, R_IFM} rstate_e;
  rstate_e            rs;
  logic               rb;
  logic [7:0]         f;
  logic [COLIDW-1:0]  c;
  logic [8:0]         g, nzei_q;
  logic [7:0]         nzew_q;
  logic [WAW:0]       wa;
  logic [IAW:0]       ia;
  assign wa = {rb, widx_f(c, 9'(f))};
  assign ia = {rb, g[IAW-1:0]};

  assign rd_busy = (rs != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; rb <= 1'b0; f <= '0; c <= '0; g <= '0;
      nzei_q <= '0; nzew_q <= '0; tok <= '0; rd_done <= 1'b0;
    end else begin
      tok     <= '0;
      rd_done <= 1'b0;
      unique case (rs)
        R_IDLE: if (rd_start) begin
          rb <= rd_bank; f <= '0; c <= '0; g <= '0;
          nzei_q <= nzei_max; nzew_q <= nzew_max;
          if (nzew_max == 0) rd_done <= 1'b1;
          else               rs <= R_WGT;
        end
        R_WGT: begin
          tok.valid  <= 1'b1;
          tok.is_wgt <= 1'b1;
          tok.col    <= c;
          if (9'(f) < 9'(w_len[rb][CIW'(c)])) begin
            tok.data <= w_data[wa];
            {tok.r, tok.c} <= w_loc[wa];
          end
          if (c == COLIDW'(N_PE - 1)) begin
            c <= '0;
            if (nzei_q == 0) begin
              f <= f + 1'b1;
              if (f == nzew_q - 1'b1) begin rs <= R_IDLE; rd_done <= 1'b1; end
            end else begin
              g <= '0; rs <= R_IFM;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
        R_IFM: begin
          if (g < ifm_len[rb]) begin
            tok.valid <= 1'b1;
            tok.data  <= ifm_data[ia];
            {tok.r, tok.c} <= ifm_loc[ia];
          end
          g <= g + 1'b1;
          if (g == nzei_q - 1'b1) begin
            f <= f + 1'b1;
            if (f == nzew_q - 1'b1) begin rs <= R_IDLE; rd_done <= 1'b1; end
            else rs <= R_WGT;
          end
        end
        default: rs <= R_IDLE;
      endcase
    end
  end
endmodule
