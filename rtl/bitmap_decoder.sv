// bitmap_decoder: the decompressing unit of an I&W buffer. It turns the bitmap
// of a compressed IFM tile or kernel into the location info (row, col) of
// each non-zero element (NZE), in the order the NZEs are stored.
//
// Bitmap format (from the compression figures of the paper): bit i of the
// bitmap flags element i of the tile in row-major order, 1 for non-zero.
// The bitmap is sent as 16-bit words, element 0 in bit 0 of the first word.
// The unit scans one bitmap bit per cycle (this design's choice, simplest
// form), keeping a (row, col) counter that wraps at the tile width.
//
// Interface: pulse start with nbits (tile size) and width; then offer words
// with in_valid/in_ready. For each set bit loc_valid pulses with (loc_r,
// loc_c), one cycle after the bit is scanned; done pulses together with the
// location of the last bit (or one cycle after start when nbits is 0).
module bitmap_decoder
  import sense_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [8:0]      nbits,
  input  logic [LOCW:0]   width,
  input  logic            in_valid,
  input  logic [15:0]     in_word,
  output logic            in_ready,
  output logic            loc_valid,
  output logic [LOCW-1:0] loc_r,
  output logic [LOCW-1:0] loc_c,
  output logic            done,
  output logic            busy
);
  logic        have_word;
  logic [15:0] sh;
  logic [3:0]  bitcnt;
  logic [8:0]  remaining;
  logic [LOCW-1:0] r, c;

  assign in_ready = busy && !have_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_word <= 1'b0; sh <= '0; bitcnt <= '0; remaining <= '0;
      r <= '0; c <= '0; busy <= 1'b0;
      loc_valid <= 1'b0; loc_r <= '0; loc_c <= '0; done <= 1'b0;
    end else begin
      loc_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        busy      <= (nbits != 0);
        done      <= (nbits == 0);
        remaining <= nbits;
        have_word <= 1'b0;
        r <= '0; c <= '0;
      end else if (busy) begin
        if (!have_word) begin
          if (in_valid) begin
            sh        <= in_word;
            bitcnt    <= '0;
            have_word <= 1'b1;
          end
        end else begin
          loc_valid <= sh[0];
          loc_r     <= r;
          loc_c     <= c;
          sh        <= sh >> 1;
          bitcnt    <= bitcnt + 1'b1;
          remaining <= remaining - 1'b1;
          if ({1'b0, c} == width - 1'b1) begin
            c <= '0;
            r <= r + 1'b1;
          end else begin
            c <= c + 1'b1;
          end
          if (remaining == 9'd1) begin
            busy      <= 1'b0;
            have_word <= 1'b0;
            done      <= 1'b1;
          end else if (bitcnt == 4'd15) begin
            have_word <= 1'b0;
          end
        end
      end
    end
  end
endmodule
