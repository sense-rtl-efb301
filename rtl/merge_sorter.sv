// merge_sorter: the ranking unit of the channel clustering module. It sorts
// N channel slots by their NZE counts, largest first, with a bottom-up merge
// sort (the paper names Merge Sort; the sequential form is this design's).
//
// start latches the N keys. Each pass merges neighbouring sorted runs of
// width w into runs of 2w, one element per cycle, between two index arrays
// used ping-pong; log2(N) passes of N cycles sort the slots. The merge takes
// the left run on ties, so channels with equal counts keep their order
// (stable). done pulses when idx holds the slot numbers in ranked order;
// it stays valid until the next start. Latency: N*log2(N) + 1 cycles.
module merge_sorter #(
  parameter int N  = 32,
  parameter int KW = 16,
  parameter int IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [KW-1:0] keys [N],
  output logic [IW-1:0] idx  [N],
  output logic          busy,
  output logic          done
);
  logic [KW-1:0] key_q [N];
  logic [IW-1:0] a [N];
  logic [IW-1:0] b [N];
  logic          sel;          // 0: a -> b, 1: b -> a
  logic [IW:0]   w, lo, li, ri, k;

  logic [IW:0] mid, hi;
  assign mid = lo + w;
  assign hi  = lo + (w << 1);

  logic [IW-1:0] sl, sr, pick;
  logic          take_left;
  always_comb begin
    sl = sel ? b[li[IW-1:0]] : a[li[IW-1:0]];
    sr = sel ? b[ri[IW-1:0]] : a[ri[IW-1:0]];
    take_left = (li < mid) && ((ri >= hi) || (key_q[sl] >= key_q[sr]));
    pick = take_left ? sl : sr;
  end

  for (genvar i = 0; i < N; i++) begin : g_out
    assign idx[i] = sel ? b[i] : a[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= 1'b0; w <= '0; lo <= '0; li <= '0; ri <= '0; k <= '0;
      busy <= 1'b0; done <= 1'b0;
      for (int i = 0; i < N; i++) begin a[i] <= IW'(i); b[i] <= '0; key_q[i] <= '0; end
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int i = 0; i < N; i++) begin a[i] <= IW'(i); key_q[i] <= keys[i]; end
        sel <= 1'b0; w <= (IW+1)'(1); lo <= '0; li <= '0; ri <= (IW+1)'(1); k <= '0;
        busy <= (N > 1);
        done <= (N <= 1);
      end else if (busy) begin
        if (sel) a[k[IW-1:0]] <= pick;
        else     b[k[IW-1:0]] <= pick;
        if (take_left) li <= li + 1'b1;
        else           ri <= ri + 1'b1;
        k <= k + 1'b1;
        if (k == hi - 1'b1) begin
          if (hi == (IW+1)'(N)) begin
            // pass finished
            sel <= ~sel;
            lo  <= '0;
            li  <= '0;
            ri  <= w << 1;
            k   <= '0;
            w   <= w << 1;
            if ((w << 1) == (IW+1)'(N)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            lo <= hi;
            li <= hi;
            ri <= hi + w;
          end
        end
      end
    end
  end
endmodule
