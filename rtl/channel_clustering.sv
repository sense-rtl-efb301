// channel_clustering: balances IFM sparsity across PE rows for the next layer.
// Parts, as the paper lists them: an NZE number buffer, a ranking unit (merge
// sort), a channel index buffer, a crossbar and a group of FIFOs.
//
// NZE number buffer: each output buffer reports the NZE count of a finished
// OFM tile (nz_valid/nz_count); the count is added to channel
// nz_ch_base + column (nz_ch_base is a multiple of N_PE), so each entry
// holds the NZEs of a whole OFM channel.
// nze_clear empties it at the start of a layer.
//
// Ranking: because the array produces N_PE OFM channels at a time, channels
// are ranked in groups of N_PE ("divide and rule"). sort_start ranks group
// sort_group with merge_sorter (largest count first, ties keep channel
// order) and copies the result, one entry per cycle, into the channel index
// buffer: entry g*N_PE+k holds the channel that PE row k reads for input
// group g in the next layer. An entry never written reads as its own index.
//
// Crossbar and FIFOs: the compressed streams of the N_PE columns (16-bit
// halves) are packed per channel into MDW-bit memory words, so one DRAM word
// never mixes two channels and a channel can be read back on its own in the
// sorted order. Each column has a FIFO of packed words; a round-robin
// crossbar hands one word per cycle to the DRAM write port, tagged with its
// column and word index in the block (wr_col, wr_widx). Two halves per word
// follow the 32-bit memory of the paper's clustering figure; the FIFO depth
// and the round-robin policy are this design's.
module channel_clustering
  import sense_pkg::*;
#(
  parameter int N_PE   = 32,
  parameter int MAX_CH = 2048,
  parameter int FDEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // compressed OFM streams
  input  logic          cm_valid [N_PE],
  input  data_t         cm_data  [N_PE],
  input  logic          cm_last  [N_PE],
  output logic          cm_ready [N_PE],
  // packed words towards DRAM
  output logic          wr_valid,
  output logic [COLIDW-1:0] wr_col,
  output logic [15:0]   wr_widx,
  output logic [MDW-1:0] wr_word,
  input  logic          wr_ready,
  // NZE number buffer
  input  logic          nze_clear,
  input  logic          nz_valid [N_PE],
  input  logic [6:0]    nz_count [N_PE],
  input  logic [CHW-1:0] nz_ch_base,
  // ranking
  input  logic          sort_start,
  input  logic [CHW-1:0] sort_group,
  output logic          sort_busy,
  output logic          sort_done,
  // channel index lookup
  input  logic [CHW-1:0] idx_addr,
  output logic [CHW-1:0] idx_data,
  output logic          busy
);
  localparam int IW  = $clog2(N_PE);
  localparam int FAW = $clog2(FDEPTH);

  localparam int NG  = MAX_CH / N_PE;     // channel groups
  localparam int GW  = $clog2(NG);
  localparam int CAW = $clog2(MAX_CH);

  // ---------------- NZE number buffer ----------------
  // Banked by column: column c only ever adds to channels g*N_PE + c, so
  // each column owns a bank of NG counters with one write port, and the
  // ranking unit reads row sort_group of every bank at once.
  logic [15:0]    keys [N_PE];
  logic [GW-1:0]  nz_grp, s_grp;
  assign nz_grp = GW'(nz_ch_base >> IW);
  assign s_grp  = GW'(sort_group);

  for (genvar c = 0; c < N_PE; c++) begin : g_cnt
    logic [15:0]   cnt [NG];
    logic [NG-1:0] cnt_vld;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)           cnt_vld <= '0;
      else if (nze_clear)   cnt_vld <= '0;
      else if (nz_valid[c]) cnt_vld[nz_grp] <= 1'b1;
    end
    always_ff @(posedge clk) begin
      if (nz_valid[c] && !nze_clear)
        cnt[nz_grp] <= (cnt_vld[nz_grp] ? cnt[nz_grp] : 16'd0) + 16'(nz_count[c]);
    end
    assign keys[c] = cnt_vld[s_grp] ? cnt[s_grp] : 16'd0;   // sampled on sort_start
  end

  // ---------------- ranking unit + channel index buffer ----------------
  logic [IW-1:0]  ranked [N_PE];
  logic           ms_start, ms_busy, ms_done;
  logic [CHW-1:0] grp_base;
  logic           copying;
  logic [IW:0]    cp;

  assign ms_start = sort_start;
  merge_sorter #(.N(N_PE), .KW(16)) u_rank (
    .clk, .rst_n, .start(ms_start), .keys, .idx(ranked), .busy(ms_busy), .done(ms_done)
  );

  logic [CHW-1:0]    ibuf [MAX_CH];
  logic [MAX_CH-1:0] ibuf_vld;
  assign idx_data = ibuf_vld[CAW'(idx_addr)] ? ibuf[CAW'(idx_addr)] : idx_addr;

  always_ff @(posedge clk) begin
    if (copying) ibuf[CAW'(grp_base + CHW'(cp))] <= grp_base + CHW'(ranked[cp[IW-1:0]]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_base <= '0; copying <= 1'b0; cp <= '0; sort_done <= 1'b0; ibuf_vld <= '0;
    end else begin
      sort_done <= 1'b0;
      if (sort_start) grp_base <= CHW'(sort_group * CHW'(N_PE));
      if (ms_done) begin copying <= 1'b1; cp <= '0; end
      if (copying) begin
        ibuf_vld[CAW'(grp_base + CHW'(cp))] <= 1'b1;
        cp <= cp + 1'b1;
        if (cp == (IW+1)'(N_PE - 1)) begin copying <= 1'b0; sort_done <= 1'b1; end
      end
    end
  end
  assign sort_busy = ms_busy || ms_done || copying || ms_start;

  // ---------------- FIFOs and crossbar ----------------
  logic [MDW-1:0] fw   [N_PE][FDEPTH];
  logic [15:0]    fi   [N_PE][FDEPTH];
  logic [FAW-1:0] wp   [N_PE];
  logic [FAW-1:0] rp   [N_PE];
  logic [FAW:0]   fcnt [N_PE];
  logic           hv   [N_PE];
  data_t          hd   [N_PE];
  logic [15:0]    widx [N_PE];

  logic [IW-1:0]  rr, sel;
  logic           any;
  always_comb begin
    any = 1'b0;
    sel = rr;
    for (int j = 0; j < N_PE; j++) begin
      automatic logic [IW-1:0] cidx = IW'(rr + IW'(j));
      if (!any && fcnt[cidx] != 0) begin any = 1'b1; sel = cidx; end
    end
  end
  assign wr_valid = any;
  assign wr_col   = COLIDW'(sel);
  assign wr_word  = fw[sel][rp[sel]];
  assign wr_widx  = fi[sel][rp[sel]];

  logic busy_v;
  always_comb begin
    busy_v = copying || ms_busy;
    for (int c = 0; c < N_PE; c++) if (fcnt[c] != 0 || hv[c]) busy_v = 1'b1;
  end
  assign busy = busy_v;

  for (genvar c = 0; c < N_PE; c++) begin : g_fifo
    logic push, pop, acc;
    assign cm_ready[c] = (fcnt[c] < (FAW+1)'(FDEPTH));
    assign acc  = cm_valid[c] && cm_ready[c];
    assign push = acc && (hv[c] || cm_last[c]);
    assign pop  = wr_valid && wr_ready && (sel == IW'(c));

    always_ff @(posedge clk) begin
      if (push) begin
        fw[c][wp[c]] <= hv[c] ? {cm_data[c], hd[c]} : {16'h0, cm_data[c]};
        fi[c][wp[c]] <= widx[c];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wp[c] <= '0; rp[c] <= '0; fcnt[c] <= '0; hv[c] <= 1'b0; hd[c] <= '0; widx[c] <= '0;
      end else begin
        if (acc) begin
          if (push) hv[c] <= 1'b0;
          else begin hv[c] <= 1'b1; hd[c] <= cm_data[c]; end
        end
        if (push) begin
          wp[c]   <= wp[c] + 1'b1;
          widx[c] <= cm_last[c] ? 16'd0 : widx[c] + 1'b1;
        end
        if (pop) rp[c] <= rp[c] + 1'b1;
        fcnt[c] <= fcnt[c] + (FAW+1)'(push) - (FAW+1)'(pop);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (wr_valid && wr_ready) rr <= sel + 1'b1;
  end
endmodule
