// top_controller: runs one CONV layer through the computing-flow loop nest
//   for a < T_oc_outer, b < T_row, c < T_col, d < T_oc_inner, e < T_ic:
//     stream N_NZEW_MAX weights x N_NZEI_MAX IFM NZEs through the array
// with T_oc_outer = 1, T_oc_inner = T_oc for Reuse-IFM-First (RIF) and the
// reverse for Reuse-Weight-First (RWF), as in the paper's computing-flow
// table. One iteration of e is a "pass".
//
// Two processes share the ping-pong banks of the I&W buffers:
//  * the loader fetches, for pass p, the compressed IFM block of every row
//    (input channel e*N_PE+r, looked up in the channel index buffer when
//    use_cluster is set) and the N_PE x N_PE kernels into bank p%2. A bank
//    whose IFM (or weights) already hold what pass p needs is not reloaded:
//    this is where the RIF/RWF order saves DRAM reads. Rows whose channel
//    does not exist and columns beyond C_o are left empty.
//  * the computer waits for a full bank, starts all rows, waits for the last
//    token to leave the array and frees the bank. After the last input group
//    of an output block it drains the Psum buffers (sparse mode) through the
//    post-processing modules into an output buffer bank, then starts the
//    output buffers and compression modules and waits until every packed
//    word is written back. In dense mode sums reach the output buffer during
//    the passes and post-processing is bypassed.
// At the end of the layer every group of N_PE output channels is ranked by
// the channel clustering module. done pulses when the layer is finished.
//
// DRAM blocks: IFM (tile t, channel i) at i_base + (t*C_i + i)*i_stride,
// kernel (o, i) at w_base + (o*C_i + i)*w_stride, OFM (t, o) at
// o_base + (t*C_o + o)*o_stride (word addresses; a block starts with its
// data_length in the low half of its first word). This layout, the
// sequential (non-overlapped) output phase and all handshakes are this
// design's choices; the paper gives the loop nest and the reuse orders.
//
// Lint note: the layer configuration is one struct; the fields this module
// does not read (ReLU / pooling switches, output base and stride) are used in
// sense_top and reported here as unused bits, as is the pass record's
// first-input-group flag, which the computer does not need.
module top_controller
  import sense_pkg::*;
#(
  parameter int N_PE = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  // DRAM read port
  output logic            mem_rd_en,
  output logic [MAW-1:0]  mem_rd_addr,
  input  logic            mem_rd_valid,
  input  logic [MDW-1:0]  mem_rd_data,
  // I&W buffer load side
  output logic            ld_bank,
  output logic [COLIDW-1:0] ld_row,
  output logic            ld_start,
  output logic            ld_is_wgt,
  output logic [COLIDW-1:0] ld_col,
  output logic            ld_valid,
  output data_t           ld_data,
  input  logic            ld_ready,
  input  logic            ld_busy,
  output logic            ld_clr_ifm,
  output logic            ld_clr_w,
  // channel index buffer
  output logic [CHW-1:0]  idx_addr,
  input  logic [CHW-1:0]  idx_data,
  // compute
  output logic            rd_bank,
  output logic            rd_start,
  input  logic            rd_done,
  // drain / post-processing / output buffer
  output drain_t          drain,
  output logic            post_start,
  output logic            ob_bank,
  output logic            ob_clr,
  output logic            ob_rd_start,
  output logic [PAW:0]    ob_rd_len,
  output logic            comp_start,
  input  logic            out_busy,
  output logic [15:0]     out_tile,
  output logic [CHW-1:0]  out_ocg,
  // channel clustering
  output logic            nze_clear,
  output logic [CHW-1:0]  nz_ch_base,
  output logic            sort_start,
  output logic [CHW-1:0]  sort_group,
  input  logic            sort_busy,
  // statistics
  output logic [31:0]     stat_passes,
  output logic [31:0]     stat_ifm_loads,
  output logic [31:0]     stat_w_loads,
  output logic [31:0]     stat_ifm_reuse,
  output logic [31:0]     stat_w_reuse
);
  // ---------------- derived sizes ----------------
  logic [CHW-1:0] t_ic, t_oc, t_oc_out, t_oc_in;
  logic [LOCW:0]  ho, wo;
  logic [15:0]    n_tiles;
  assign t_ic     = CHW'((cfg.ci + CHW'(N_PE - 1)) / CHW'(N_PE));
  assign t_oc     = CHW'((cfg.co + CHW'(N_PE - 1)) / CHW'(N_PE));
  assign t_oc_out = (cfg.reuse == RIF) ? CHW'(1) : t_oc;
  assign t_oc_in  = (cfg.reuse == RIF) ? t_oc : CHW'(1);
  assign ho       = cfg.ih - cfg.kh + 1'b1;
  assign wo       = cfg.iw - cfg.kw + 1'b1;
  assign n_tiles  = 16'(cfg.t_row) * 16'(cfg.t_col);

  typedef struct packed {
    logic [CHW-1:0] ocg;
    logic [15:0]    tile;
    logic           first_e;
    logic           last_e;
  } pass_t;

  logic  [1:0] bank_full, bf_set, bf_clr;
  pass_t       rec [2];
  logic        running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bank_full <= '0;
    else        bank_full <= (bank_full | bf_set) & ~bf_clr;
  end

  // ================= loader =================
  typedef enum logic [3:0] {
    L_IDLE, L_WAIT, L_CLR, L_NEXT_I, L_NEXT_W, L_B_START, L_B_W0, L_B_FEED,
    L_B_REQ, L_B_WAIT, L_COMMIT, L_FIN
  } lstate_e;
  lstate_e ls;
  logic    ret_w;                         // block load returns to L_NEXT_W
  logic [CHW-1:0] la, ld_, le;
  logic [7:0]     lb, lc;
  logic           lbank;
  logic [CHW-1:0] ocg_l;
  logic [15:0]    tile_l;
  logic [COLIDW:0] r, col;
  logic           need_i, need_w;
  logic [CHW+15:0] ifm_tag [2];
  logic [2*CHW-1:0] w_tag [2];
  logic [1:0]     ifm_tag_v, w_tag_v;
  logic [MAW-1:0] baddr;
  logic [MDW-1:0] wbuf;
  logic           hs;
  logic [9:0]     hcnt, htot;

  assign ocg_l  = (cfg.reuse == RIF) ? ld_ : la;
  assign tile_l = 16'(lb) * 16'(cfg.t_col) + 16'(lc);

  logic [CHW-1:0] ic_l, phys, oc_l;
  assign ic_l     = CHW'(le * CHW'(N_PE) + CHW'(r));
  assign idx_addr = ic_l;
  assign phys     = cfg.use_cluster ? idx_data : ic_l;
  assign oc_l     = CHW'(ocg_l * CHW'(N_PE) + CHW'(col));

  logic [9:0] nbits_i, nbits_w;
  assign nbits_i = 10'(cfg.ih * cfg.iw);
  assign nbits_w = 10'(cfg.kh * cfg.kw);

  assign ld_bank  = lbank;
  assign ld_row   = r[COLIDW-1:0];
  assign ld_col   = col[COLIDW-1:0];
  assign ld_valid = (ls == L_B_FEED);
  assign ld_data  = hs ? wbuf[2*DW-1:DW] : wbuf[DW-1:0];
  assign mem_rd_en   = (ls == L_B_START && !ld_busy) || (ls == L_B_REQ);
  assign mem_rd_addr = baddr;
  assign ld_start    = (ls == L_B_START) && !ld_busy;
  assign ld_clr_ifm  = (ls == L_CLR) && need_i;
  assign ld_clr_w    = (ls == L_CLR) && need_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= L_IDLE; ret_w <= 1'b0; la <= '0; ld_ <= '0; le <= '0; lb <= '0; lc <= '0;
      lbank <= 1'b0; r <= '0; col <= '0; need_i <= 1'b0; need_w <= 1'b0;
      ifm_tag[0] <= '0; ifm_tag[1] <= '0; w_tag[0] <= '0; w_tag[1] <= '0;
      ifm_tag_v <= '0; w_tag_v <= '0; baddr <= '0; wbuf <= '0; hs <= 1'b0;
      hcnt <= '0; htot <= '0; bf_set <= '0; ld_is_wgt <= 1'b0;
      rec[0] <= '0; rec[1] <= '0;
      stat_passes <= '0; stat_ifm_loads <= '0; stat_w_loads <= '0;
      stat_ifm_reuse <= '0; stat_w_reuse <= '0;
    end else begin
      bf_set <= '0;
      unique case (ls)
        L_IDLE: if (start) begin
          la <= '0; ld_ <= '0; le <= '0; lb <= '0; lc <= '0; lbank <= 1'b0;
          ifm_tag_v <= '0; w_tag_v <= '0;
          stat_passes <= '0; stat_ifm_loads <= '0; stat_w_loads <= '0;
          stat_ifm_reuse <= '0; stat_w_reuse <= '0;
          ls <= L_WAIT;
        end
        L_WAIT: if (!bank_full[lbank] && !bf_set[lbank]) begin
          need_i <= !(ifm_tag_v[lbank] && ifm_tag[lbank] == {tile_l, le});
          need_w <= !(w_tag_v[lbank] && w_tag[lbank] == {ocg_l, le});
          ls <= L_CLR;
        end
        L_CLR: begin
          r <= '0; col <= '0;
          if (need_i) stat_ifm_loads <= stat_ifm_loads + 1; else stat_ifm_reuse <= stat_ifm_reuse + 1;
          if (need_w) stat_w_loads <= stat_w_loads + 1;   else stat_w_reuse <= stat_w_reuse + 1;
          ls <= need_i ? L_NEXT_I : (need_w ? L_NEXT_W : L_COMMIT);
        end
        L_NEXT_I: begin
          if (r == (COLIDW+1)'(N_PE)) begin
            r <= '0; col <= '0;
            ls <= need_w ? L_NEXT_W : L_COMMIT;
          end else if (ic_l < cfg.ci) begin
            baddr <= cfg.i_base + MAW'((32'(tile_l) * 32'(cfg.ci) + 32'(phys)) * 32'(cfg.i_stride));
            ld_is_wgt <= 1'b0; ret_w <= 1'b0;
            ls <= L_B_START;
          end else begin
            r <= r + 1'b1;
          end
        end
        L_NEXT_W: begin
          if (r == (COLIDW+1)'(N_PE)) begin
            ls <= L_COMMIT;
          end else if (col == (COLIDW+1)'(N_PE)) begin
            col <= '0;
            r   <= r + 1'b1;
          end else if (ic_l < cfg.ci && oc_l < cfg.co) begin
            baddr <= cfg.w_base + MAW'((32'(oc_l) * 32'(cfg.ci) + 32'(phys)) * 32'(cfg.w_stride));
            ld_is_wgt <= 1'b1; ret_w <= 1'b1;
            ls <= L_B_START;
          end else begin
            col <= col + 1'b1;
          end
        end
        // ---- one compressed block ----
        L_B_START: if (!ld_busy) ls <= L_B_W0;
        L_B_W0: if (mem_rd_valid) begin
          wbuf <= mem_rd_data;
          hs   <= 1'b0;
          hcnt <= '0;
          htot <= 10'd1 + ((ld_is_wgt ? nbits_w : nbits_i) + 10'd15) / 10'd16 + 10'(mem_rd_data[8:0]);
          ls   <= L_B_FEED;
        end
        L_B_FEED: if (ld_ready) begin
          hcnt <= hcnt + 1'b1;
          if (hcnt == htot - 1'b1) begin
            if (ret_w) begin
              ls  <= L_NEXT_W;
              col <= col + 1'b1;
            end else begin
              ls <= L_NEXT_I;
              r  <= r + 1'b1;
            end
          end else if (hs) begin
            baddr <= baddr + 1'b1;
            ls    <= L_B_REQ;
          end else begin
            hs <= 1'b1;
          end
        end
        L_B_REQ: ls <= L_B_WAIT;
        L_B_WAIT: if (mem_rd_valid) begin
          wbuf <= mem_rd_data; hs <= 1'b0; ls <= L_B_FEED;
        end
        // ---- pass committed ----
        L_COMMIT: if (!ld_busy) begin
          bf_set[lbank]    <= 1'b1;
          rec[lbank]       <= '{ocg: ocg_l, tile: tile_l, first_e: (le == 0), last_e: (le == t_ic - 1'b1)};
          ifm_tag[lbank]   <= {tile_l, le};
          w_tag[lbank]     <= {ocg_l, le};
          ifm_tag_v[lbank] <= 1'b1;
          w_tag_v[lbank]   <= 1'b1;
          lbank            <= ~lbank;
          stat_passes      <= stat_passes + 1;
          // advance the loop nest (a, b, c, d, e)
          ls <= L_WAIT;
          if (le != t_ic - 1'b1) le <= le + 1'b1;
          else begin
            le <= '0;
            if (ld_ != t_oc_in - 1'b1) ld_ <= ld_ + 1'b1;
            else begin
              ld_ <= '0;
              if (lc != cfg.t_col - 1'b1) lc <= lc + 1'b1;
              else begin
                lc <= '0;
                if (lb != cfg.t_row - 1'b1) lb <= lb + 1'b1;
                else begin
                  lb <= '0;
                  if (la != t_oc_out - 1'b1) la <= la + 1'b1;
                  else ls <= L_FIN;
                end
              end
            end
          end
        end
        L_FIN: if (!running) ls <= L_IDLE;
        default: ls <= L_IDLE;
      endcase
    end
  end

  // ================= computer =================
  typedef enum logic [3:0] {
    C_IDLE, C_WAIT, C_RUN, C_FLUSH, C_DRAIN, C_DFLUSH, C_OUT, C_OWAIT, C_SORT, C_SWAIT
  } cstate_e;
  cstate_e        cs;
  logic           cbank;
  pass_t          cur;
  logic [15:0]    blocks_left;
  logic [7:0]     fl;
  logic [PAW:0]   da, n_out;
  logic [CHW-1:0] g;

  assign n_out = cfg.pool_en ? (PAW+1)'(ho[LOCW:1] * wo[LOCW:1]) : (PAW+1)'(ho * wo);

  assign rd_bank     = cbank;
  assign rd_start    = (cs == C_WAIT) && bank_full[cbank];
  assign ob_clr      = (rd_start && !cfg.sparse_mode && rec[cbank].first_e) ||
                       ((cs == C_DRAIN) && da == 0);
  assign post_start  = (cs == C_DRAIN) && da == 0;
  assign drain.valid = (cs == C_DRAIN);
  assign drain.addr  = da[PAW-1:0];
  assign ob_rd_start = (cs == C_OUT);
  assign comp_start  = (cs == C_OUT);
  assign ob_rd_len   = n_out;
  assign out_tile    = cur.tile;
  assign out_ocg     = cur.ocg;
  assign nz_ch_base  = CHW'(cur.ocg * CHW'(N_PE));
  assign nze_clear   = start && !running;
  assign sort_start  = (cs == C_SORT);
  assign sort_group  = g;
  assign busy        = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; cbank <= 1'b0; cur <= '0; blocks_left <= '0; fl <= '0; da <= '0;
      g <= '0; ob_bank <= 1'b0; bf_clr <= '0; running <= 1'b0; done <= 1'b0;
    end else begin
      bf_clr <= '0;
      done   <= 1'b0;
      unique case (cs)
        C_IDLE: if (start) begin
          running <= 1'b1; cbank <= 1'b0; ob_bank <= 1'b0;
          blocks_left <= 16'(t_oc) * n_tiles;
          cs <= C_WAIT;
        end
        C_WAIT: if (bank_full[cbank]) begin
          cur <= rec[cbank];
          cs  <= C_RUN;
        end
        C_RUN: if (rd_done) begin
          fl <= 8'(2 * N_PE + 4);
          cs <= C_FLUSH;
        end
        C_FLUSH: begin
          fl <= fl - 1'b1;
          if (fl == 0) begin
            bf_clr[cbank] <= 1'b1;
            cbank <= ~cbank;
            da    <= '0;
            if (!cur.last_e)          cs <= C_WAIT;
            else if (cfg.sparse_mode) cs <= C_DRAIN;
            else                      cs <= C_OUT;
          end
        end
        C_DRAIN: begin
          da <= da + 1'b1;
          if (da == (PAW+1)'(ho * wo) - 1'b1) begin
            fl <= 8'(N_PE + 4);
            cs <= C_DFLUSH;
          end
        end
        C_DFLUSH: begin
          fl <= fl - 1'b1;
          if (fl == 0) cs <= C_OUT;
        end
        C_OUT: begin
          fl <= 8'd3;
          cs <= C_OWAIT;
        end
        C_OWAIT: begin
          if (fl != 0) fl <= fl - 1'b1;
          else if (!out_busy) begin
            ob_bank     <= ~ob_bank;
            blocks_left <= blocks_left - 1'b1;
            if (blocks_left == 16'd1) begin g <= '0; cs <= C_SORT; end
            else cs <= C_WAIT;
          end
        end
        C_SORT: begin
          fl <= 8'd2;
          cs <= C_SWAIT;
        end
        C_SWAIT: begin
          if (fl != 0) fl <= fl - 1'b1;
          else if (!sort_busy) begin
            if (g == t_oc - 1'b1) begin
              cs <= C_IDLE; running <= 1'b0; done <= 1'b1;
            end else begin
              g <= g + 1'b1; cs <= C_SORT;
            end
          end
        end
        default: cs <= C_IDLE;
      endcase
    end
  end
endmodule
