// gstg_tile_check: tile check unit.  Decides whether the ellipse
// q(d) = a dx^2 + 2 b dx dy + c dy^2 <= T of one Gaussian reaches an
// axis-aligned square of pixel sample positions [x0, x0+SIZE-1] x
// [y0, y0+SIZE-1].  It is used with SIZE = 16 for the tiles of the bitmask
// generation module and with SIZE = 64 for group identification, so a tile
// that is hit always lies in a group that is hit.
//
// The test is the exact ellipse/rectangle intersection (the "ellipse
// boundary" of the evaluated configuration), computed with multiplications
// and comparisons only:  hit if the centre lies in the square, or if the
// minimum of q along one of the four edges is <= T.  Along an edge the fixed
// coordinate is u and the free one v in [lo, hi]:
//   q(v) = A u^2 + 2 B u v + C v^2
// its minimum is at an end point, or at the vertex v* = -B u / C when
// C lo < -B u < C hi, where it equals u^2 (A C - B^2) / C; that last
// comparison is done as u^2 (A C - B^2) <= T C to avoid a division.
// T comes from gstg_pkg::opac_thr (opacity-aware, never below the exact
// bound), so no pixel with alpha >= 1/255 is ever missed.
//
// Purely combinational; the surrounding module registers the result.
module gstg_tile_check
  import gstg_pkg::*;
#(
  parameter int SIZE = TILE
) (
  input  gauss_t                         g,
  input  logic        [THR_W-1:0]        thr,   // Q8.16
  input  logic signed [PIX_W+1:0]        x0,    // square origin, pixels
  input  logic signed [PIX_W+1:0]        y0,
  output logic                           hit
);

  function automatic logic edge_hit(input con_t A, input con_t B, input con_t C,
                                    input logic signed [23:0] u,
                                    input logic signed [23:0] lo,
                                    input logic signed [23:0] hi,
                                    input logic signed [127:0] t32,   // T, 32 fraction bits
                                    input logic signed [127:0] t56);  // T*C, 56 fraction bits
    logic signed [127:0] qlo, qhi, bu, clo, chi, det, vtx;
    qlo = quad(A, B, C, u, lo);
    qhi = quad(A, B, C, u, hi);
    bu  = -(128'(B) * 128'(u));
    clo = 128'(C) * 128'(lo);
    chi = 128'(C) * 128'(hi);
    det = 128'(A) * 128'(C) - 128'(B) * 128'(B);
    vtx = 128'(u) * 128'(u) * det;
    return (qlo <= t32) || (qhi <= t32) ||
           ((C > 0) && (clo < bu) && (bu < chi) && (vtx <= t56));
  endfunction

  logic signed [23:0]  lx, hx, ly, hy;
  logic signed [127:0] t32, t56_v, t56_h;
  logic                ctr_in;

  always_comb begin
    lx = (24'(x0) <<< XY_FRAC) - 24'(g.x);
    hx = (24'(x0 + $signed((PIX_W+2)'(SIZE - 1))) <<< XY_FRAC) - 24'(g.x);
    ly = (24'(y0) <<< XY_FRAC) - 24'(g.y);
    hy = (24'(y0 + $signed((PIX_W+2)'(SIZE - 1))) <<< XY_FRAC) - 24'(g.y);
    t32    = $signed({104'd0, thr}) <<< 16;
    t56_v  = t32 * 128'(g.cc);   // vertical edges: free coordinate is y, C = cc
    t56_h  = t32 * 128'(g.ca);   // horizontal edges: free coordinate is x, C = ca
    ctr_in = (lx <= 0) && (hx >= 0) && (ly <= 0) && (hy >= 0);
    hit = ctr_in ||
          edge_hit(g.ca, g.cb, g.cc, lx, ly, hy, t32, t56_v) ||
          edge_hit(g.ca, g.cb, g.cc, hx, ly, hy, t32, t56_v) ||
          edge_hit(g.cc, g.cb, g.ca, ly, lx, hx, t32, t56_h) ||
          edge_hit(g.cc, g.cb, g.ca, hy, lx, hx, t32, t56_h);
  end

endmodule
