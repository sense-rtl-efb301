// output_buffer: the OFM buffer of one PE column, two 64 x 16b banks used
// ping-pong (one bank is filled from the post-processing module while the
// other is read by the compression module), as the paper describes.
//
// Write side: clr empties bank wr_bank (all entries read as zero again) and
// rewinds its write pointer; wr_valid writes wr_data at the next sequential
// address (raster order from post_pro); acc_valid adds acc_data into
// acc_addr (used in dense mode, where the column delivers sums per output
// address rather than a finished tile).
// Read side: rd_start with rd_bank and rd_len streams that many entries out
// with rd_valid/rd_ready, rd_last on the final one. While reading, the buffer
// counts the non-zero elements; nz_valid pulses with nz_count after the last
// element is taken. This count is what the channel clustering module ranks.
module output_buffer
  import sense_pkg::*;
#(
  parameter int DEPTH = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_bank,
  input  logic        clr,
  input  logic        wr_valid,
  input  data_t       wr_data,
  input  logic        acc_valid,
  input  logic [AW-1:0] acc_addr,
  input  data_t       acc_data,
  input  logic        rd_start,
  input  logic        rd_bank,
  input  logic [AW:0] rd_len,
  output logic        rd_valid,
  output data_t       rd_data,
  output logic        rd_last,
  input  logic        rd_ready,
  output logic        nz_valid,
  output logic [AW:0] nz_count
);
  data_t              mem [2*DEPTH];
  logic [2*DEPTH-1:0] vld;
  logic [AW-1:0]      wptr;
  logic               rbank, ractive;
  logic [AW:0]        rptr, rlen, nzc;

  function automatic data_t rd_mem(logic b, logic [AW-1:0] a);
    return vld[{b, a}] ? mem[{b, a}] : data_t'(0);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_valid)       mem[{wr_bank, wptr}]     <= wr_data;
    else if (acc_valid) mem[{wr_bank, acc_addr}] <= data_t'(rd_mem(wr_bank, acc_addr) + acc_data);
  end

  logic take;
  assign take = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; wptr <= '0; rbank <= 1'b0; ractive <= 1'b0; rptr <= '0; rlen <= '0;
      nzc <= '0; rd_valid <= 1'b0; rd_data <= '0; rd_last <= 1'b0;
      nz_valid <= 1'b0; nz_count <= '0;
    end else begin
      nz_valid <= 1'b0;
      if (clr) begin
        for (int i = 0; i < DEPTH; i++) vld[{wr_bank, AW'(i)}] <= 1'b0;
        wptr <= '0;
      end else if (wr_valid) begin
        vld[{wr_bank, wptr}] <= 1'b1;
        wptr <= wptr + 1'b1;
      end else if (acc_valid) begin
        vld[{wr_bank, acc_addr}] <= 1'b1;
      end

      if (take) begin
        if (rd_data != '0) nzc <= nzc + 1'b1;
        if (rd_last) begin
          nz_valid <= 1'b1;
          nz_count <= nzc + (AW+1)'(rd_data != '0);
        end
      end
      if (rd_start) begin
        rbank <= rd_bank; rlen <= rd_len; rptr <= '0; nzc <= '0;
        ractive <= (rd_len != 0);
        rd_valid <= 1'b0;
        if (rd_len == 0) begin nz_valid <= 1'b1; nz_count <= '0; end
      end else if (ractive && (!rd_valid || rd_ready)) begin
        rd_valid <= 1'b1;
        rd_data  <= rd_mem(rbank, rptr[AW-1:0]);
        rd_last  <= (rptr == rlen - 1'b1);
        rptr     <= rptr + 1'b1;
        if (rptr == rlen - 1'b1) ractive <= 1'b0;
      end else if (take) begin
        rd_valid <= 1'b0;
        rd_last  <= 1'b0;
      end
    end
  end
endmodule
