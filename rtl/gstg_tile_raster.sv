// gstg_tile_raster: tile-wise rasterization module with its memory
// controller.
//
// NRU (16) rasterization units work on one 16x16 tile together; RU r owns
// pixel row r of the tile.  Every Gaussian index that leaves the FIFO is
// turned into one feature record that is broadcast to all RUs, which then
// blend it into their 16 pixels in 16 cycles.  The paper gives 16 parallel
// RUs and a memory controller; giving each RU one row of the current tile
// (rather than one whole tile each) is this design's choice, which keeps a
// single in-order index stream from the FIFO.
//
// When the tile is finished (end_valid), the memory controller takes a
// snapshot of all 256 colours, the RUs are cleared for the next tile at the
// same edge, and the controller writes the pixels out one per cycle on the
// pix stream, dropping those outside the img_w x img_h frame.  end_ready is
// low while a previous tile is still being written out and while the RUs
// are busy.  all_done is the AND of the RUs' early-exit flags.
module gstg_tile_raster
  import gstg_pkg::*;
#(
  parameter int NRU = TILE,
  parameter int PIX = TILE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PIX_W-1:0]  tile_x0,
  input  logic [PIX_W-1:0]  tile_y0,
  input  logic [PIX_W-1:0]  img_w,
  input  logic [PIX_W-1:0]  img_h,
  input  logic              g_valid,
  output logic              g_ready,
  input  gauss_t            g,
  output logic              all_done,
  input  logic              end_valid,
  output logic              end_ready,
  output logic              pix_valid,
  input  logic              pix_ready,
  output pixel_t            pix
);
  localparam int RW = $clog2(NRU);
  localparam int KW = $clog2(PIX);

  logic [NRU-1:0]                     ru_ready, ru_done, ru_idle_v;
  logic [NRU-1:0][PIX-1:0][COL_W-1:0] cr, cg, cb;
  logic                               clear;

  for (genvar r = 0; r < NRU; r++) begin : g_ru
    gstg_ru #(.PIX(PIX)) u_ru (
      .clk, .rst_n, .clear,
      .x0(tile_x0), .y(tile_y0 + PIX_W'(r)),
      .g_valid(g_valid && g_ready), .g_ready(ru_ready[r]), .g,
      .col_r(cr[r]), .col_g(cg[r]), .col_b(cb[r]), .all_done(ru_done[r]), .idle(ru_idle_v[r])
    );
  end

  assign g_ready  = &ru_ready;
  assign all_done = &ru_done;

  // ---------------- memory controller ----------------
  logic [NRU-1:0][PIX-1:0][COL_W-1:0] sr, sg, sb;
  logic [PIX_W-1:0]                   sx0, sy0;
  logic                               mc_busy;
  logic [RW-1:0]                      mr;
  logic [KW-1:0]                      mk;
  logic [PIX_W-1:0]                   px, py;
  logic                               in_frame, last_px, adv;

  // RUs are idle when no Gaussian is in flight or being offered.
  logic ru_idle;
  assign ru_idle   = (&ru_idle_v) && !g_valid;
  assign end_ready = !mc_busy && ru_idle;
  assign clear     = end_valid && end_ready;

  assign px       = sx0 + PIX_W'(mk);
  assign py       = sy0 + PIX_W'(mr);
  assign in_frame = (px < img_w) && (py < img_h);
  assign last_px  = (mr == RW'(NRU - 1)) && (mk == KW'(PIX - 1));
  assign pix_valid = mc_busy && in_frame;
  assign pix      = '{x: px, y: py, r: sr[mr][mk], g: sg[mr][mk], b: sb[mr][mk]};
  assign adv      = mc_busy && (!in_frame || pix_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_busy <= 1'b0; mr <= '0; mk <= '0; sx0 <= '0; sy0 <= '0;
      sr <= '0; sg <= '0; sb <= '0;
    end else begin
      if (clear) begin
        sr <= cr; sg <= cg; sb <= cb;
        sx0 <= tile_x0; sy0 <= tile_y0;
        mc_busy <= 1'b1; mr <= '0; mk <= '0;
      end else if (adv) begin
        mk <= mk + 1'b1;
        if (mk == KW'(PIX - 1)) mr <= mr + 1'b1;
        if (last_px) mc_busy <= 1'b0;
      end
    end
  end
endmodule
