// gstg_top: GS-TG accelerator, four preprocessing modules (PM) and four
// GS-TG cores.
//
// Each PM is a feature calculation unit (gstg_feat: projection, 2D
// covariance, conic, radius, SH colour, depth) followed by culling and group
// identification (gstg_pm).  All PMs share the frame's camera.
//
// The PMs and the cores meet only through off-chip memory: the PMs write
// (group, Gaussian) pairs out, the memory system gathers them into one list
// per tile group, and each group's list is read back into one core, which
// renders that group's 64x64 pixels.  That memory (DRAM and its buffering in
// front of the PMs) is outside this module, so both sides are ports:
//   gs_in_*   trained 3D Gaussians into PM i (one Gaussian per transfer)
//   cam       camera of the frame, held stable while a frame is processed
//   pm_out_*  (group, Gaussian) pairs out of PM i
//   core_in_* group lists into core i, core_in_last on a group's last pair
//   pix_*     rendered pixels out of core i
// The four-way replication of PM and core follows the paper's hardware
// configuration; how groups are distributed over the cores is left to the
// memory side (the testbenches use group index modulo 4).
module gstg_top
  import gstg_pkg::*;
#(
  parameter int NPM        = 4,
  parameter int NCORE      = 4,
  parameter int N          = 1344,
  parameter int FIFO_DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [PIX_W-1:0]         img_w,
  input  logic [PIX_W-1:0]         img_h,
  input  cam_t                     cam,
  input  logic [NPM-1:0]           gs_in_valid,
  output logic [NPM-1:0]           gs_in_ready,
  input  g3d_t                     gs_in [NPM],
  output logic [NPM-1:0]           pm_out_valid,
  input  logic [NPM-1:0]           pm_out_ready,
  output grp_item_t                pm_out [NPM],
  input  logic [NCORE-1:0]         core_in_valid,
  output logic [NCORE-1:0]         core_in_ready,
  input  grp_item_t                core_in [NCORE],
  input  logic [NCORE-1:0]         core_in_last,
  output logic [NCORE-1:0]         pix_valid,
  input  logic [NCORE-1:0]         pix_ready,
  output pixel_t                   pix [NCORE],
  output logic                     idle,
  output logic [NPM-1:0][31:0]     n_culled,
  output logic [NPM-1:0][31:0]     n_pairs,
  output logic [NCORE-1:0][31:0]   n_groups,
  output logic [NCORE-1:0][31:0]   n_overflow,
  output logic [NCORE-1:0][31:0]   n_filtered,
  output logic [NCORE-1:0][31:0]   n_skipped,
  output logic [NCORE-1:0][31:0]   n_fifo_stall,
  output logic [NCORE-1:0][31:0]   n_overlap
);
  logic [NPM-1:0]   pm_idle;
  logic [NCORE-1:0] core_idle;
  logic [NPM-1:0]   feat_busy;

  for (genvar i = 0; i < NPM; i++) begin : g_pm
    logic   f_valid, f_ready;
    pm_in_t f_out;

    gstg_feat u_feat (
      .clk, .rst_n, .cam,
      .in_valid(gs_in_valid[i]), .in_ready(gs_in_ready[i]), .in(gs_in[i]),
      .out_valid(f_valid), .out_ready(f_ready), .out(f_out)
    );

    gstg_pm u_pm (
      .clk, .rst_n, .img_w, .img_h,
      .in_valid(f_valid), .in_ready(f_ready), .in(f_out),
      .out_valid(pm_out_valid[i]), .out_ready(pm_out_ready[i]), .out(pm_out[i]),
      .idle(pm_idle[i]), .n_culled(n_culled[i]), .n_pairs(n_pairs[i])
    );
    assign feat_busy[i] = f_valid;
  end

  for (genvar i = 0; i < NCORE; i++) begin : g_core
    gstg_core #(.N(N), .FIFO_DEPTH(FIFO_DEPTH)) u_core (
      .clk, .rst_n, .img_w, .img_h,
      .in_valid(core_in_valid[i]), .in_ready(core_in_ready[i]), .in_item(core_in[i]),
      .in_last(core_in_last[i]),
      .pix_valid(pix_valid[i]), .pix_ready(pix_ready[i]), .pix(pix[i]),
      .idle(core_idle[i]), .n_groups(n_groups[i]), .n_overflow(n_overflow[i]),
      .n_filtered(n_filtered[i]), .n_skipped(n_skipped[i]),
      .n_fifo_stall(n_fifo_stall[i]), .n_overlap(n_overlap[i])
    );
  end

  assign idle = (&pm_idle) && (&core_idle) && !(|feat_busy);
endmodule
