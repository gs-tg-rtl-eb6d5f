// gstg_pkg: number formats, record types and shared arithmetic of the GS-TG
// tile-grouping 3D Gaussian splatting renderer.
//
// Geometry follows the configuration the accelerator is evaluated in: 16x16
// pixel tiles grouped 4x4 into 64x64 pixel groups, one 16-bit bitmask per
// Gaussian and group (bit 15 = tile (row 0, col 0), bit 0 = tile (row 3,
// col 3), the order of the printed bitmask strings of the pipeline figure).
// All number formats are this design's own choice; the evaluated models use
// FP16, here every quantity is fixed point:
//   pixel coordinates  signed 18 bit, 4 fraction bits (+-8192 px)
//   conic (inverse 2D covariance a, b, c) signed 32 bit, 24 fraction bits
//   opacity, colour    unsigned 16 bit, 16 fraction bits (Q0.16)
//   depth              16-bit key compared as an unsigned integer; a positive
//                      IEEE half-precision depth keeps its order this way
//   transmittance      unsigned 17 bit, 16 fraction bits (1.0 = 65536)
// The shared functions here give the exact fixed-point rules that both the
// tile check (which tiles a Gaussian may reach) and the rasterizer use, so
// that the tile check is always a superset of what the rasterizer blends.
package gstg_pkg;

  // ---------------- geometry ----------------
  localparam int TILE        = 16;  // small tile edge in pixels
  localparam int GROUP_TILES = 4;   // tiles per group edge
  localparam int GROUP       = TILE * GROUP_TILES;  // 64 px group edge
  localparam int NTILES      = GROUP_TILES * GROUP_TILES;  // 16 -> 16-bit mask
  localparam int GC_W        = 7;   // group coordinate width (5472/64 = 86 groups)
  localparam int PIX_W       = 14;  // pixel coordinate / image size width

  // ---------------- number formats ----------------
  localparam int XY_W     = 18;
  localparam int XY_FRAC  = 4;
  localparam int CON_W    = 32;
  localparam int CON_FRAC = 24;
  localparam int OP_W     = 16;
  localparam int COL_W    = 16;
  localparam int DEPTH_W  = 16;
  localparam int GIDX_W   = 24;
  localparam int THR_W    = 24;  // ellipse threshold, Q8.16
  localparam int TR_W     = 17;  // transmittance Q1.16
  localparam int RAD_W    = 12;  // bounding radius in pixels

  localparam logic [TR_W-1:0] TR_ONE  = 17'd65536;
  localparam logic [TR_W-1:0] TR_EXIT = 17'd7;       // 1e-4 * 65536 = 6.55
  localparam logic [15:0]     ALPHA_MAX = 16'd64881; // 0.99 * 65536

  typedef logic signed [XY_W-1:0]  xy_t;
  typedef logic signed [CON_W-1:0] con_t;

  // Gaussian features after projection (what the rasterizer and the tile
  // checks need).  236 bits; with the 16-bit bitmask a record fits 32 bytes.
  typedef struct packed {
    logic [GIDX_W-1:0]  gidx;   // global Gaussian index
    xy_t                x, y;   // 2D_XY
    con_t               ca, cb, cc;  // 2D_Cov as conic (inverse covariance)
    logic [OP_W-1:0]    opac;   // sigma
    logic [COL_W-1:0]   r, g, b;     // G_RGB
    logic [DEPTH_W-1:0] depth;  // D
  } gauss_t;

  // Input of a preprocessing module: features plus the bounding radius.
  typedef struct packed {
    gauss_t            g;
    logic [RAD_W-1:0]  radius;
  } pm_in_t;

  // Trained 3D Gaussian as read from memory (input of feature calculation).
  // Position Q16.16 world units, activated scale Q8.24, rotation quaternion
  // Q1.15 (normalised inside), opacity Q0.16, spherical-harmonics colour
  // coefficients of degree 0..3 (16 per channel, index 3*k + channel) Q4.12.
  localparam int SH_N = 16;
  typedef struct packed {
    logic [GIDX_W-1:0]                 gidx;
    logic signed [2:0][31:0]           pos;    // [0]=x, [1]=y, [2]=z
    logic [2:0][31:0]                  scale;  // [0]=sx, [1]=sy, [2]=sz
    logic signed [3:0][15:0]           rot;    // [0]=w, [1]=x, [2]=y, [3]=z
    logic [OP_W-1:0]                   opac;
    logic signed [3*SH_N-1:0][15:0]    shc;
  } g3d_t;

  // Camera of the frame: world-to-camera rotation rows Q2.30, translation
  // Q16.16, focal lengths and principal point in pixels Q16.16, frustum
  // limits 1.3*tan(fov/2) Q16.16 and the camera centre in world Q16.16.
  typedef struct packed {
    logic signed [2:0][2:0][31:0] rw;     // rw[row][col]
    logic signed [2:0][31:0]      tw;
    logic [31:0]                  fx, fy;
    logic signed [31:0]           cx, cy;
    logic [31:0]                  limx, limy;
    logic signed [2:0][31:0]      campos;
  } cam_t;

  // One (group, Gaussian) pair: preprocessing output and core input.
  typedef struct packed {
    logic [GC_W-1:0] gx, gy;
    gauss_t          g;
  } grp_item_t;

  // Pixel written to the frame.
  typedef struct packed {
    logic [PIX_W-1:0] x, y;
    logic [COL_W-1:0] r, g, b;
  } pixel_t;

  // -------------------------------------------------------------------------
  // Ellipse threshold: alpha = sigma*exp(-q/2) >= 1/255  <=>  q <= 2 ln(255 sigma).
  // log2(v) = e + log2(1+m) is bounded above by e + m + 0.0862, so the
  // returned threshold (Q8.16) is never below the exact one.  Returns 0 with
  // ok = 0 when 255*sigma < 1 (the Gaussian can never reach 1/255).
  // -------------------------------------------------------------------------
  function automatic logic [THR_W-1:0] opac_thr(input logic [OP_W-1:0] s, output logic ok);
    logic [23:0] v;       // 255*s, Q8.16
    int          msb;
    logic [31:0] m;       // mantissa fraction, Q.16
    logic signed [31:0] l; // log2 upper bound, Q.16
    logic [47:0] t;
    v   = 24'(s) * 24'd255;
    msb = 0;
    for (int i = 0; i < 24; i++) if (v[i]) msb = i;
    m   = 32'(24'(v << (23 - msb)) & 24'h7fffff) >> 7;  // Q.23 -> Q.16
    l  = ((msb - 16) <<< 16) + $signed(m) + 32'sd5650;
    ok = (msb >= 16);
    if (!ok) return '0;
    t = 48'(l) * 48'd90853;   // 2*ln2 = 1.3862944 < 90853/65536
    return THR_W'(t >> 16);
  endfunction

  // q = a dx^2 + 2 b dx dy + c dy^2 with dx, dy in Q.4 and a, b, c in Q.24:
  // result has 32 fraction bits.
  function automatic logic signed [127:0] quad(input con_t a, input con_t b, input con_t c,
                                               input logic signed [23:0] dx,
                                               input logic signed [23:0] dy);
    logic signed [127:0] a_, b_, c_, x_, y_;
    a_ = 128'(a); b_ = 128'(b); c_ = 128'(c); x_ = 128'(dx); y_ = 128'(dy);
    return a_ * x_ * x_ + 2 * b_ * x_ * y_ + c_ * y_ * y_;
  endfunction

  // 2^(-k/16) in Q.16 for k = 0..16, round(65536 * 2^(-k/16)).
  function automatic logic [16:0] exp2_tab(input int k);
    case (k)
      0: return 17'd65536;  1: return 17'd62757;  2: return 17'd60097;
      3: return 17'd57549;  4: return 17'd55109;  5: return 17'd52773;
      6: return 17'd50535;  7: return 17'd48393;  8: return 17'd46341;
      9: return 17'd44376; 10: return 17'd42495; 11: return 17'd40693;
     12: return 17'd38968; 13: return 17'd37316; 14: return 17'd35734;
     15: return 17'd34219; default: return 17'd32768;
    endcase
  endfunction

  // Opacity-weighted Gaussian value alpha (Q0.16) of equation (1) for a
  // quadratic form q (32 fraction bits).  exp(-q/2) = 2^-y, y = q * log2(e)/2;
  // 2^-frac(y) is linearly interpolated in the 16-entry table above, then
  // shifted by int(y).  alpha is clamped to 0.99 as in the reference
  // 3D-GS renderer; q < 0 gives 0.
  function automatic logic [15:0] alpha_of(input logic signed [127:0] q, input logic [OP_W-1:0] s);
    logic [127:0] yq;   // Q.16
    logic [31:0]  y;
    logic [16:0]  t0, t1, e;
    logic [31:0]  ip;
    logic [31:0]  a;
    int           k;
    if (q < 0) return '0;
    yq = (128'(q) >> 16) * 128'd47275 >> 16;   // 0.7213475*65536 = 47274.4
    if (yq >= 128'(32'd20 << 16)) return '0;
    y  = 32'(yq);
    k  = int'(y[15:12]);
    t0 = exp2_tab(k);
    t1 = exp2_tab(k + 1);
    ip = 32'(t0 - t1) * 32'(y[11:0]) >> 12;
    e  = 17'(32'(t0) - ip) >> y[20:16];
    a  = (32'(e) * 32'(s)) >> 16;
    if (a > 32'(ALPHA_MAX)) a = 32'(ALPHA_MAX);
    return a[15:0];
  endfunction

  // alpha >= 1/255  (exact in the fixed-point domain: 255*alpha >= 65536).
  function automatic logic alpha_ok(input logic [15:0] a);
    return (24'(a) * 24'd255) >= 24'd65536;
  endfunction

endpackage
