// gstg_rm: rasterization module (RM) of a GS-TG core.
//
// Renders the 16 tiles of one group from the group shared memory.  For each
// tile in turn (tile t = 4*row + col, Tile_Location = one-hot bit 15-t) the
// front end walks the group's Sorted_G_Idx list eight entries per cycle,
// reads their Tile_Bitmasks, and the tile filter (bitwise AND with
// Tile_Location, 16-bit OR) marks which of the eight reach the tile.  Those
// indices go into the FIFO in sorted order, followed by an end-of-tile
// marker.  The back end pops one index at a time, reads that Gaussian's
// features and broadcasts them to the 16 RUs; an end marker makes the
// memory controller take the finished tile and clears the RUs.
//
// Early exit: once every pixel of the tile has stopped blending, the
// remaining indices of that tile are discarded at one per cycle, and if the
// front end is still scanning that tile it jumps straight to its end
// marker.  The front end may run ahead into the next tile while the back end
// still rasterizes; it stalls when the FIFO has fewer than eight free
// entries.  The filter, FIFO and 16 RUs are the paper's; the marker scheme,
// the skip on early exit and the counters are this design's.
//
// start (one cycle, with cnt/gx/gy) begins a group; done pulses when the
// last tile has been handed to the memory controller.
module gstg_rm
  import gstg_pkg::*;
#(
  parameter int N          = 1344,
  parameter int RD         = 8,
  parameter int FIFO_DEPTH = 32,
  parameter int LIDX_W     = $clog2(N)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [LIDX_W:0]            cnt,
  input  logic [GC_W-1:0]            gx,
  input  logic [GC_W-1:0]            gy,
  output logic                       busy,
  output logic                       done,
  input  logic [PIX_W-1:0]           img_w,
  input  logic [PIX_W-1:0]           img_h,
  // group shared memory read side
  output logic [LIDX_W:0]            rd_pos,
  input  logic [RD-1:0][LIDX_W-1:0]  rd_sidx,
  input  logic [RD-1:0][NTILES-1:0]  rd_bmask,
  output logic [LIDX_W-1:0]          feat_addr,
  input  gauss_t                     feat,
  // pixels to memory
  output logic                       pix_valid,
  input  logic                       pix_ready,
  output pixel_t                     pix,
  // event counters
  output logic [31:0]                n_filtered,   // (Gaussian, tile) pairs removed by the bitmask
  output logic [31:0]                n_skipped,    // indices dropped by early exit
  output logic [31:0]                n_fifo_stall  // cycles the front end waited on the FIFO
);
  localparam int W = LIDX_W + 1;   // FIFO entry: {end marker, index}

  // ---------------- front end: filter into FIFO ----------------
  typedef enum logic [1:0] {F_IDLE, F_SCAN, F_END} fstate_t;
  fstate_t             fs;
  logic [3:0]          ft;                // tile being filtered
  logic [LIDX_W:0]     pos, gcnt;
  logic [GC_W-1:0]     ggx, ggy;
  logic [RD-1:0]       lane_en, valid;
  logic [NTILES-1:0]   tile_loc;
  logic [RD-1:0]       wr_lane;
  logic [RD-1:0][W-1:0] wr_data;
  logic                wr_ready, rd_valid, rd_ready;
  logic [W-1:0]        rd_data;
  logic [3:0]          ct;                // tile being rasterized
  logic                cbusy, all_done, tile_skip;

  assign tile_loc = NTILES'(1) << (NTILES - 1 - int'(ft));
  always_comb
    for (int j = 0; j < RD; j++) lane_en[j] = (fs == F_SCAN) && ((pos + (LIDX_W+1)'(j)) < gcnt);

  gstg_tile_filter #(.RD(RD)) u_filter (
    .bmask(rd_bmask), .tile_loc, .lane_en, .valid
  );

  assign rd_pos    = pos;
  // the back end has given up on the tile the front end is scanning
  assign tile_skip = all_done && cbusy && (ct == ft);

  always_comb begin
    wr_lane = '0;
    wr_data = '0;
    for (int j = 0; j < RD; j++) wr_data[j] = {1'b0, rd_sidx[j]};
    if (fs == F_SCAN && !tile_skip && wr_ready) wr_lane = valid;
    if (fs == F_END && wr_ready) begin
      wr_lane[0] = 1'b1;
      wr_data[0] = {1'b1, LIDX_W'(0)};
    end
  end

  gstg_idx_fifo #(.W(W), .WR(RD), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .flush(1'b0), .wr_lane, .wr_data, .wr_ready,
    .rd_valid, .rd_ready, .rd_data, .level()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs <= F_IDLE; ft <= '0; pos <= '0; gcnt <= '0; ggx <= '0; ggy <= '0;
      n_filtered <= '0; n_fifo_stall <= '0;
    end else begin
      case (fs)
        F_IDLE: if (start) begin
          fs <= F_SCAN; ft <= '0; pos <= '0; gcnt <= cnt; ggx <= gx; ggy <= gy;
        end
        F_SCAN: begin
          if (pos >= gcnt || tile_skip) fs <= F_END;
          else if (wr_ready) begin
            n_filtered <= n_filtered + 32'($countones(lane_en & ~valid));
            pos <= pos + (LIDX_W+1)'(RD);
            if (pos + (LIDX_W+1)'(RD) >= gcnt) fs <= F_END;
          end else n_fifo_stall <= n_fifo_stall + 1;
        end
        F_END: if (wr_ready) begin
          pos <= '0;
          ft  <= ft + 1'b1;
          fs  <= (ft == 4'(NTILES - 1)) ? F_IDLE : F_SCAN;
        end
        default: fs <= F_IDLE;
      endcase
    end
  end

  // ---------------- back end: FIFO into RUs ----------------
  logic            is_end, g_valid, g_ready, end_valid, end_ready;
  logic [PIX_W-1:0] tx0, ty0;

  assign is_end    = rd_data[W-1];
  assign feat_addr = rd_data[LIDX_W-1:0];
  assign tx0 = PIX_W'({ggx, 6'b0}) + PIX_W'({ct[1:0], 4'b0});
  assign ty0 = PIX_W'({ggy, 6'b0}) + PIX_W'({ct[3:2], 4'b0});
  assign g_valid   = cbusy && rd_valid && !is_end && !all_done;
  assign end_valid = cbusy && rd_valid && is_end;
  assign rd_ready  = cbusy && ((is_end && end_ready) || (!is_end && (all_done || g_ready)));

  gstg_tile_raster u_raster (
    .clk, .rst_n, .tile_x0(tx0), .tile_y0(ty0), .img_w, .img_h,
    .g_valid, .g_ready, .g(feat), .all_done,
    .end_valid, .end_ready, .pix_valid, .pix_ready, .pix
  );

  assign busy = cbusy || (fs != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cbusy <= 1'b0; ct <= '0; done <= 1'b0; n_skipped <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cbusy <= 1'b1; ct <= '0;
      end else if (cbusy && rd_valid) begin
        if (is_end && end_ready) begin
          ct <= ct + 1'b1;
          if (ct == 4'(NTILES - 1)) begin cbusy <= 1'b0; done <= 1'b1; end
        end else if (!is_end && all_done) begin
          n_skipped <= n_skipped + 1;
        end
      end
    end
  end
endmodule
