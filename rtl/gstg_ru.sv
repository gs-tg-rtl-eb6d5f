// gstg_ru: rasterization unit (RU).
//
// Owns one row of PIX (16) pixels of the tile being rendered and, for each
// Gaussian it is given, performs alpha computation and alpha blending:
//   alpha = min(0.99, sigma * exp(-q/2)),  q = d^T Cov^-1 d, d = pixel - 2D_XY
//   skipped when alpha < 1/255 or q < 0
//   C  += G_RGB * alpha * T ;  T *= (1 - alpha)          (equations (1), (2))
// A pixel stops blending once its transmittance T is below 1e-4 (early
// exit); all_done rises when every pixel of the row has stopped; idle is high
// when no Gaussian is in flight.
// The equations, the 1/255 cut and the 1e-4 early exit follow the paper; the
// 0.99 clamp follows the reference 3D-GS renderer; the fixed-point formats
// and the exponential (gstg_pkg::alpha_of) are this design's.
//
// Timing: one pixel per cycle, so a Gaussian occupies the unit for PIX
// cycles; g_ready is high in the last of those cycles, so Gaussians can
// follow back to back every PIX cycles.  clear resets the row (T = 1,
// C = 0) for a new tile.  Pixel k of the row is at (x0 + k, y).
module gstg_ru
  import gstg_pkg::*;
#(
  parameter int PIX = TILE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [PIX_W-1:0]           x0,
  input  logic [PIX_W-1:0]           y,
  input  logic                       g_valid,
  output logic                       g_ready,
  input  gauss_t                     g,
  output logic [PIX-1:0][COL_W-1:0]  col_r,
  output logic [PIX-1:0][COL_W-1:0]  col_g,
  output logic [PIX-1:0][COL_W-1:0]  col_b,
  output logic                       all_done,
  output logic                       idle
);
  localparam int KW = $clog2(PIX);

  gauss_t            cur;
  logic              busy;
  logic [KW-1:0]     k;
  logic [TR_W-1:0]   tr   [PIX];
  logic [17:0]       acc_r[PIX], acc_g[PIX], acc_b[PIX];

  // alpha of the current pixel
  logic signed [23:0]  dx, dy;
  logic signed [127:0] q;
  logic [15:0]         alpha;
  logic                blend;
  logic [31:0]         wt;            // alpha * T, Q.16
  logic [TR_W-1:0]     tr_next;

  always_comb begin
    dx      = (24'({1'b0, x0 + PIX_W'(k)}) <<< XY_FRAC) - 24'(cur.x);
    dy      = (24'({1'b0, y}) <<< XY_FRAC) - 24'(cur.y);
    q       = quad(cur.ca, cur.cb, cur.cc, dx, dy);
    alpha   = alpha_of(q, cur.opac);
    blend   = busy && (tr[k] >= TR_EXIT) && alpha_ok(alpha);
    wt      = (32'(alpha) * 32'(tr[k])) >> 16;
    tr_next = TR_W'((48'(tr[k]) * (48'd65536 - 48'(alpha))) >> 16);
  end

  assign g_ready = !busy || (k == KW'(PIX - 1));
  assign idle    = !busy;

  always_comb begin
    all_done = 1'b1;
    for (int j = 0; j < PIX; j++) begin
      if (tr[j] >= TR_EXIT) all_done = 1'b0;
      col_r[j] = acc_r[j][17:16] != 0 ? '1 : acc_r[j][15:0];
      col_g[j] = acc_g[j][17:16] != 0 ? '1 : acc_g[j][15:0];
      col_b[j] = acc_b[j][17:16] != 0 ? '1 : acc_b[j][15:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; k <= '0; cur <= '0;
      for (int j = 0; j < PIX; j++) begin
        tr[j] <= TR_ONE; acc_r[j] <= '0; acc_g[j] <= '0; acc_b[j] <= '0;
      end
    end else if (clear) begin
      busy <= 1'b0; k <= '0;
      for (int j = 0; j < PIX; j++) begin
        tr[j] <= TR_ONE; acc_r[j] <= '0; acc_g[j] <= '0; acc_b[j] <= '0;
      end
    end else begin
      if (blend) begin
        acc_r[k] <= acc_r[k] + 18'((48'(cur.r) * 48'(wt)) >> 16);
        acc_g[k] <= acc_g[k] + 18'((48'(cur.g) * 48'(wt)) >> 16);
        acc_b[k] <= acc_b[k] + 18'((48'(cur.b) * 48'(wt)) >> 16);
        tr[k]    <= tr_next;
      end
      if (busy) k <= k + 1'b1;
      if (g_valid && g_ready) begin
        cur  <= g;
        busy <= 1'b1;
        k    <= '0;
      end else if (busy && k == KW'(PIX - 1)) begin
        busy <= 1'b0;
      end
    end
  end
endmodule
