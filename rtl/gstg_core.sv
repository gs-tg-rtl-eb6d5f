// gstg_core: one GS-TG core: bitmask generation module (BGM), group-wise
// sorting module (GSM), group shared memory and rasterization module (RM).
//
// Input is the list of one tile group at a time: grp_item_t records (group
// coordinates and Gaussian features) with in_last on the group's last one.
// Only groups with at least one Gaussian are sent; pixels of groups that are
// never sent are left to the frame's initial (background) value.
// As a record is accepted its depth is loaded into the GSM and the record
// enters the BGM; the BGM result (record + Tile_Bitmask) is written into the
// fill bank of the group shared memory at the next local index.  After the
// last record the GSM sorts and writes Sorted_G_Idx into the same bank, the
// bank is marked full and the fill side moves to the other bank.  The RM
// renders full banks one at a time and frees them, so filling (bitmask
// generation and sorting) of group k+1 overlaps rasterization of group k.
//
// A group longer than N Gaussians does not fit the bank: records beyond
// the N-th are accepted and dropped (n_overflow counts them), so such a
// group is rendered from its first N records only.  The paper does not say
// how an over-long group is handled; this is this design's choice.
//
// Counters: groups rendered, dropped records, (Gaussian, tile) pairs removed
// by the bitmask, indices skipped by early exit, FIFO stall cycles, and
// cycles in which a group was being filled while another was rasterized.
module gstg_core
  import gstg_pkg::*;
#(
  parameter int N          = 1344,
  parameter int LANES      = 16,
  parameter int RD         = 8,
  parameter int FIFO_DEPTH = 32,
  parameter int LIDX_W     = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PIX_W-1:0]  img_w,
  input  logic [PIX_W-1:0]  img_h,
  input  logic              in_valid,
  output logic              in_ready,
  input  grp_item_t         in_item,
  input  logic              in_last,
  output logic              pix_valid,
  input  logic              pix_ready,
  output pixel_t            pix,
  output logic              idle,
  output logic [31:0]       n_groups,
  output logic [31:0]       n_overflow,
  output logic [31:0]       n_filtered,
  output logic [31:0]       n_skipped,
  output logic [31:0]       n_fifo_stall,
  output logic [31:0]       n_overlap
);
  typedef enum logic [1:0] {W_ACC, W_DRAIN, W_SORT} wstate_t;

  wstate_t          ws;
  logic             wb, rb;
  logic [1:0]       bank_full;
  logic [LIDX_W:0]  bank_cnt [2];
  logic [GC_W-1:0]  bank_gx [2], bank_gy [2];
  logic [LIDX_W:0]  n_in, wcnt;
  logic [GC_W-1:0]  cur_gx, cur_gy;
  logic             grp_full, accept, to_bgm;

  // BGM
  logic             bgm_in_ready, bgm_out_valid;
  grp_item_t        bgm_out_item;
  logic [NTILES-1:0] bgm_bmask;

  // GSM
  logic             gsm_start, gsm_clear, gsm_busy, gsm_done;
  logic [LIDX_W:0]  gsm_count;
  logic             sw_valid;
  logic [LIDX_W:0]  sw_addr;
  logic [LANES-1:0] sw_en;
  logic [LANES-1:0][LIDX_W-1:0] sw_idx;

  assign grp_full     = (n_in >= (LIDX_W+1)'(N));
  assign to_bgm   = !grp_full;
  assign in_ready = (ws == W_ACC) && !bank_full[wb] && !gsm_busy && !gsm_clear && (grp_full || bgm_in_ready);
  assign accept   = in_valid && in_ready;

  gstg_bgm u_bgm (
    .clk, .rst_n,
    .in_valid(in_valid && (ws == W_ACC) && !bank_full[wb] && !gsm_busy && !gsm_clear && to_bgm),
    .in_ready(bgm_in_ready), .in_item,
    .out_valid(bgm_out_valid), .out_ready(1'b1), .out_item(bgm_out_item), .out_bmask(bgm_bmask)
  );

  gstg_gsm #(.N(N), .LANES(LANES)) u_gsm (
    .clk, .rst_n, .clear(gsm_clear),
    .load_valid(accept && to_bgm), .load_depth(in_item.g.depth),
    .start(gsm_start), .busy(gsm_busy), .done(gsm_done), .count(gsm_count),
    .out_valid(sw_valid), .out_addr(sw_addr), .out_en(sw_en), .out_idx(sw_idx)
  );

  // RM side
  logic             rm_start, rm_done, rm_busy, rm_active;
  logic [LIDX_W:0]  rd_pos;
  logic [RD-1:0][LIDX_W-1:0] rd_sidx;
  logic [RD-1:0][NTILES-1:0] rd_bmask;
  logic [LIDX_W-1:0] feat_addr;
  gauss_t           feat;

  gstg_group_mem #(.N(N), .LANES(LANES), .RD(RD)) u_mem (
    .clk, .wsel(wb),
    .wr_en(bgm_out_valid), .wr_addr(LIDX_W'(wcnt)), .wr_feat(bgm_out_item.g), .wr_bmask(bgm_bmask),
    .sw_valid, .sw_addr, .sw_en, .sw_idx,
    .rsel(rb), .rd_pos, .rd_sidx, .rd_bmask, .feat_addr, .feat
  );

  assign rm_start = !rm_active && bank_full[rb];

  gstg_rm #(.N(N), .RD(RD), .FIFO_DEPTH(FIFO_DEPTH)) u_rm (
    .clk, .rst_n, .start(rm_start), .cnt(bank_cnt[rb]), .gx(bank_gx[rb]), .gy(bank_gy[rb]),
    .busy(rm_busy), .done(rm_done), .img_w, .img_h,
    .rd_pos, .rd_sidx, .rd_bmask, .feat_addr, .feat,
    .pix_valid, .pix_ready, .pix,
    .n_filtered, .n_skipped, .n_fifo_stall
  );

  assign idle = (ws == W_ACC) && (n_in == 0) && !rm_active && (bank_full == 2'b00) && !rm_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_ACC; wb <= 1'b0; rb <= 1'b0; bank_full <= '0;
      bank_cnt[0] <= '0; bank_cnt[1] <= '0; bank_gx[0] <= '0; bank_gx[1] <= '0;
      bank_gy[0] <= '0; bank_gy[1] <= '0;
      n_in <= '0; wcnt <= '0; cur_gx <= '0; cur_gy <= '0;
      gsm_start <= 1'b0; gsm_clear <= 1'b0; rm_active <= 1'b0;
      n_groups <= '0; n_overflow <= '0; n_overlap <= '0;
    end else begin
      gsm_start <= 1'b0;
      gsm_clear <= 1'b0;
      // ---- fill side ----
      if (bgm_out_valid) wcnt <= wcnt + 1'b1;
      case (ws)
        W_ACC: if (accept) begin
          if (n_in == 0) begin cur_gx <= in_item.gx; cur_gy <= in_item.gy; end
          if (grp_full) n_overflow <= n_overflow + 1;
          else      n_in <= n_in + 1'b1;
          if (in_last) ws <= W_DRAIN;
        end
        W_DRAIN: if (wcnt == n_in && !bgm_out_valid) begin
          gsm_start <= 1'b1;
          ws        <= W_SORT;
        end
        W_SORT: if (gsm_done) begin
          bank_full[wb] <= 1'b1;
          bank_cnt[wb]  <= n_in;
          bank_gx[wb]   <= cur_gx;
          bank_gy[wb]   <= cur_gy;
          wb            <= ~wb;
          n_in          <= '0;
          wcnt          <= '0;
          gsm_clear     <= 1'b1;
          ws            <= W_ACC;
        end
        default: ws <= W_ACC;
      endcase
      // ---- rasterization side ----
      if (rm_start) rm_active <= 1'b1;
      if (rm_done) begin
        rm_active     <= 1'b0;
        bank_full[rb] <= 1'b0;
        rb            <= ~rb;
        n_groups      <= n_groups + 1;
      end
      if (rm_active && (ws != W_ACC || n_in != 0)) n_overlap <= n_overlap + 1;
      assert (!(bgm_out_valid && wcnt >= (LIDX_W+1)'(N))) else $error("group memory write past the end");
    end
  end

  // GSM count and local write count agree once a group is loaded.
  always_comb if (ws == W_SORT && rst_n) assert (gsm_count == n_in || gsm_busy);
endmodule
