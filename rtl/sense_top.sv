// sense_top: the Sense sparse-CNN accelerator core.
//
// Dataflow (one CONV layer per start pulse, configured by cfg):
//   DRAM -> I&W buffers (one per PE row: decompress bitmaps, ping-pong banks)
//        -> N_PE x N_PE PE array (each row one input channel, each column one
//           output channel; weight-oriented sparse MACs into per-PE Psum
//           buffers, or a plain systolic column sum in dense mode)
//        -> per column: post-processing (ReLU, 2x2 max pool) -> output buffer
//           (ping-pong) -> compression module (bitmap format)
//        -> channel clustering (packs each channel's stream into its own DRAM
//           words, counts NZEs per output channel and ranks them) -> DRAM.
// The top controller runs the loop nest in RIF or RWF order. The DDR/AXI
// interface of the paper is not part of this core: DRAM is reached through
// a simple word port. Reads: mem_rd_en with mem_rd_addr, one word returned
// later with mem_rd_valid (one outstanding request). Writes: mem_wr_en with
// address and word, accepted when mem_wr_ready is high.
// The statistics outputs count passes, block loads, loads skipped thanks to
// reuse, and MAC operations actually performed (gated MACs excluded).
//
// Lint notes: verilator reports SYNCASYNCNET on rst_n because the PE's
// assertion samples it synchronously; sort_done of the clustering module is
// not needed (the controller watches sort_busy) and is reported as unused.
module sense_top
  import sense_pkg::*;
#(
  parameter int N_PE   = 32,
  parameter int IMAX   = 256,
  parameter int KMAX   = 32,
  parameter int MAX_CH = 2048,
  parameter int FRAC   = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  output logic           busy,
  output logic           done,
  output logic           mem_rd_en,
  output logic [MAW-1:0] mem_rd_addr,
  input  logic           mem_rd_valid,
  input  logic [MDW-1:0] mem_rd_data,
  output logic           mem_wr_en,
  output logic [MAW-1:0] mem_wr_addr,
  output logic [MDW-1:0] mem_wr_data,
  input  logic           mem_wr_ready,
  output logic [31:0]    stat_passes,
  output logic [31:0]    stat_ifm_loads,
  output logic [31:0]    stat_w_loads,
  output logic [31:0]    stat_ifm_reuse,
  output logic [31:0]    stat_w_reuse,
  output logic [31:0]    stat_macs
);
  logic [LOCW:0] ho, wo;
  assign ho = cfg.ih - cfg.kh + 1'b1;
  assign wo = cfg.iw - cfg.kw + 1'b1;

  // ---------------- controller ----------------
  logic ld_bank, ld_start, ld_is_wgt, ld_valid, ld_ready, ld_busy, ld_clr_ifm, ld_clr_w;
  logic [COLIDW-1:0] ld_row, ld_col;
  data_t ld_data;
  logic [CHW-1:0] idx_addr, idx_data;
  logic rd_bank, rd_start, rd_done;
  drain_t drain;
  logic post_start, ob_bank, ob_clr, ob_rd_start, comp_start, out_busy;
  logic [PAW:0] ob_rd_len;
  logic [15:0] out_tile;
  logic [CHW-1:0] out_ocg, nz_ch_base, sort_group;
  logic nze_clear, sort_start, sort_busy, sort_done;

  top_controller #(.N_PE(N_PE)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .mem_rd_en, .mem_rd_addr, .mem_rd_valid, .mem_rd_data,
    .ld_bank, .ld_row, .ld_start, .ld_is_wgt, .ld_col, .ld_valid, .ld_data, .ld_ready, .ld_busy,
    .ld_clr_ifm, .ld_clr_w, .idx_addr, .idx_data,
    .rd_bank, .rd_start, .rd_done,
    .drain, .post_start, .ob_bank, .ob_clr, .ob_rd_start, .ob_rd_len, .comp_start, .out_busy,
    .out_tile, .out_ocg, .nze_clear, .nz_ch_base, .sort_start, .sort_group, .sort_busy,
    .stat_passes, .stat_ifm_loads, .stat_w_loads, .stat_ifm_reuse, .stat_w_reuse
  );

  // ---------------- I&W buffers ----------------
  tok_t       row_tok [N_PE];
  logic [8:0] ifm_len [N_PE][2];
  logic       row_ready [N_PE];
  logic       row_busy  [N_PE];
  logic       row_done  [N_PE];
  logic [8:0] nzei_max;

  for (genvar r = 0; r < N_PE; r++) begin : g_iw
    logic sel, rbusy_unused;
    assign sel = (ld_row == COLIDW'(r));
    iw_buffer #(.N_PE(N_PE), .IMAX(IMAX), .KMAX(KMAX)) u_iw (
      .clk, .rst_n, .cfg_ih(cfg.ih), .cfg_iw(cfg.iw), .cfg_kh(cfg.kh), .cfg_kw(cfg.kw),
      .ld_bank, .ld_start(ld_start && sel), .ld_is_wgt, .ld_col,
      .ld_valid(ld_valid && sel), .ld_data, .ld_ready(row_ready[r]), .ld_busy(row_busy[r]),
      .ld_clr_ifm, .ld_clr_w, .ifm_len(ifm_len[r]),
      .rd_bank, .rd_start, .nzei_max, .nzew_max(cfg.nzew_max),
      .tok(row_tok[r]), .rd_busy(rbusy_unused), .rd_done(row_done[r])
    );
  end

  always_comb begin
    ld_ready = 1'b0;
    ld_busy  = 1'b0;
    nzei_max = '0;
    for (int r = 0; r < N_PE; r++) begin
      if (ld_row == COLIDW'(r)) begin
        ld_ready = row_ready[r];
        ld_busy  = row_busy[r];
      end
      if (ifm_len[r][rd_bank] > nzei_max) nzei_max = ifm_len[r][rd_bank];
    end
  end
  assign rd_done = row_done[0];

  // ---------------- PE array ----------------
  drain_t col_drain [N_PE];
  data_t  col_psum  [N_PE];
  logic [N_PE*N_PE-1:0] mac_en;

  pe_array #(.N_PE(N_PE), .FRAC(FRAC)) u_array (
    .clk, .rst_n, .sparse_mode(cfg.sparse_mode), .cfg_ho(ho), .cfg_wo(wo),
    .row_tok, .drain_in(drain), .col_drain, .col_psum, .mac_en
  );

  // ---------------- per-column output path ----------------
  logic  cm_valid [N_PE];
  data_t cm_data  [N_PE];
  logic  cm_last  [N_PE];
  logic  cm_ready [N_PE];
  logic  nz_valid [N_PE];
  logic [6:0] nz_count [N_PE];
  logic [N_PE-1:0] comp_busy;

  for (genvar c = 0; c < N_PE; c++) begin : g_col
    logic  pp_valid, rd_valid, rd_last, in_ready;
    data_t pp_data, rd_data;

    post_pro u_post (
      .clk, .rst_n, .start(post_start), .cfg_ho(ho), .cfg_wo(wo),
      .relu_en(cfg.relu_en), .pool_en(cfg.pool_en),
      .in_valid(cfg.sparse_mode && col_drain[c].valid), .in_data(col_psum[c]),
      .out_valid(pp_valid), .out_data(pp_data)
    );

    output_buffer u_ob (
      .clk, .rst_n, .wr_bank(ob_bank), .clr(ob_clr),
      .wr_valid(pp_valid), .wr_data(pp_data),
      .acc_valid(!cfg.sparse_mode && col_drain[c].valid), .acc_addr(col_drain[c].addr),
      .acc_data(col_psum[c]),
      .rd_start(ob_rd_start), .rd_bank(ob_bank), .rd_len(ob_rd_len),
      .rd_valid, .rd_data, .rd_last, .rd_ready(in_ready),
      .nz_valid(nz_valid[c]), .nz_count(nz_count[c])
    );

    compre_module u_comp (
      .clk, .rst_n, .start(comp_start),
      .in_valid(rd_valid), .in_data(rd_data), .in_last(rd_last), .in_ready,
      .out_valid(cm_valid[c]), .out_data(cm_data[c]), .out_last(cm_last[c]),
      .out_ready(cm_ready[c]), .busy(comp_busy[c])
    );
  end

  // ---------------- channel clustering ----------------
  logic              wr_valid, cl_busy;
  logic [COLIDW-1:0] wr_col;
  logic [15:0]       wr_widx;
  logic [MDW-1:0]    wr_word;

  channel_clustering #(.N_PE(N_PE), .MAX_CH(MAX_CH)) u_clu (
    .clk, .rst_n, .cm_valid, .cm_data, .cm_last, .cm_ready,
    .wr_valid, .wr_col, .wr_widx, .wr_word, .wr_ready(mem_wr_ready),
    .nze_clear, .nz_valid, .nz_count, .nz_ch_base,
    .sort_start, .sort_group, .sort_busy, .sort_done,
    .idx_addr, .idx_data, .busy(cl_busy)
  );

  logic [CHW-1:0] wr_oc;
  assign wr_oc       = CHW'(out_ocg * CHW'(N_PE) + CHW'(wr_col));
  assign mem_wr_en   = wr_valid && (wr_oc < cfg.co);
  assign mem_wr_addr = cfg.o_base +
                       MAW'((32'(out_tile) * 32'(cfg.co) + 32'(wr_oc)) * 32'(cfg.o_stride)) +
                       MAW'(wr_widx);
  assign mem_wr_data = wr_word;
  assign out_busy    = (|comp_busy) || cl_busy;

  // ---------------- MAC statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stat_macs <= '0;
    else if (start && !busy) stat_macs <= '0;
    else stat_macs <= stat_macs + 32'($countones(mac_en));
  end
endmodule
