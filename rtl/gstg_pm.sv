// gstg_pm: preprocessing module (PM), culling and group identification.
//
// Takes the projected features of one Gaussian per transaction (2D_XY,
// conic, sigma, G_RGB, depth and a bounding radius in pixels, as produced by
// the feature calculation gstg_feat in front of it) and emits one grp_item_t for
// every 64x64 tile group the Gaussian's ellipse reaches.
//   culling: a Gaussian is dropped when its depth key is <= NEAR (the near
//   plane, FP16 0.2 by default as in the 3D-GS reference code), when 255 *
//   sigma < 1 (it can never reach alpha >= 1/255), or when its bounding box
//   misses the frame;
//   group identification: the groups covered by the bounding box are visited
//   row by row, one per cycle, and each is tested with the exact ellipse
//   test of gstg_tile_check at group size, so a group is emitted only if the
//   ellipse itself reaches it (ellipse boundary).
// The 3D-to-2D projection and the spherical-harmonics colour are done by
// gstg_feat; a Gaussian it could not project arrives with opacity 0 and is
// culled here.  The split of culling and group
// identification, the bounding-box walk and the handshakes are this
// design's; the paper says only that the PM does feature calculation,
// culling and group identification like the conventional pipeline.
//
// Throughput: one group per cycle while the output is taken, plus one cycle
// per Gaussian to set up.
module gstg_pm
  import gstg_pkg::*;
#(
  parameter logic [DEPTH_W-1:0] NEAR = 16'h3266
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PIX_W-1:0]  img_w,
  input  logic [PIX_W-1:0]  img_h,
  input  logic              in_valid,
  output logic              in_ready,
  input  pm_in_t            in,
  output logic              out_valid,
  input  logic              out_ready,
  output grp_item_t         out,
  output logic              idle,
  output logic [31:0]       n_culled,
  output logic [31:0]       n_pairs
);
  localparam int SW = PIX_W + 4;   // signed pixel width for the bounding box

  gauss_t                cur;
  logic [THR_W-1:0]      thr;
  logic                  busy;
  logic signed [SW-1:0]  gx_lo, gx_hi, gy_hi, gxi, gyi;
  logic                  hit, last, step;

  // set-up of a new Gaussian
  logic                  ok;
  logic [THR_W-1:0]      thr_in;
  logic signed [SW-1:0]  cx, cy, ngx, ngy, xl, xh, yl, yh, rad;
  logic                  cull;

  always_comb begin
    thr_in = opac_thr(in.g.opac, ok);
    cx  = SW'(in.g.x >>> XY_FRAC);
    cy  = SW'(in.g.y >>> XY_FRAC);
    ngx = $signed(SW'((32'(img_w) + GROUP - 1) / GROUP));
    ngy = $signed(SW'((32'(img_h) + GROUP - 1) / GROUP));
    rad = $signed(SW'(in.radius));
    xl  = (cx - rad) >>> 6;
    xh  = (cx + rad) >>> 6;
    yl  = (cy - rad) >>> 6;
    yh  = (cy + rad) >>> 6;
    if (xl < 0) xl = '0;
    if (yl < 0) yl = '0;
    if (xh > ngx - 1) xh = ngx - 1;
    if (yh > ngy - 1) yh = ngy - 1;
    cull = !ok || (in.g.depth <= NEAR) || (xl > xh) || (yl > yh);
  end

  gstg_tile_check #(.SIZE(GROUP)) u_gchk (
    .g(cur), .thr, .x0((PIX_W+2)'(gxi <<< 6)), .y0((PIX_W+2)'(gyi <<< 6)), .hit
  );

  assign last     = (gxi == gx_hi) && (gyi == gy_hi);
  assign step     = busy && (!hit || !out_valid || out_ready);
  assign in_ready = !busy;
  assign idle     = !busy && !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; thr <= '0; out_valid <= 1'b0; out <= '0;
      gx_lo <= '0; gx_hi <= '0; gy_hi <= '0; gxi <= '0; gyi <= '0;
      n_culled <= '0; n_pairs <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cull) n_culled <= n_culled + 1;
        else begin
          busy <= 1'b1; cur <= in.g; thr <= thr_in;
          gx_lo <= xl; gx_hi <= xh; gy_hi <= yh; gxi <= xl; gyi <= yl;
        end
      end
      if (step) begin
        if (hit) begin
          out_valid <= 1'b1;
          out       <= '{gx: GC_W'(gxi), gy: GC_W'(gyi), g: cur};
          n_pairs   <= n_pairs + 1;
        end
        if (last) busy <= 1'b0;
        else if (gxi == gx_hi) begin gxi <= gx_lo; gyi <= gyi + 1'b1; end
        else gxi <= gxi + 1'b1;
      end
    end
  end
endmodule
