// psum_buffer: the partial-sum store inside one PE, a 64 x 16-bit LUT RAM.
//
// Read is asynchronous (LUT RAM), write is synchronous, so a read-modify-write
// of one address completes in one cycle and the next cycle already reads the
// new value. Each entry has a valid bit that reset clears; an entry that has
// not been written since reset reads as zero. This makes a PE start every
// output block from zero without a clearing sweep. The 64 x 16b size is the
// paper's; the valid bits are this design's way to give the RAM a reset.
// en low gates the whole buffer (no write), as in dense mode.
module psum_buffer #(
  parameter int DEPTH = 64,
  parameter int W     = 16,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);
  logic [W-1:0]     mem [DEPTH];
  logic [DEPTH-1:0] vld;

  assign rdata = vld[raddr] ? mem[raddr] : '0;

  always_ff @(posedge clk) begin
    if (en && we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          vld <= '0;
    else if (en && we)   vld[waddr] <= 1'b1;
  end
endmodule
