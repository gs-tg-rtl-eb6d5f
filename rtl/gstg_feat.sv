// gstg_feat: Gaussian feature calculation, the first stage of a
// preprocessing module (PM).  It turns one trained 3D Gaussian into the
// screen-space features the rest of the accelerator works on.
//
// For each Gaussian it computes:
//   camera-space mean   t = Rw p + tw
//   depth D             t.z, output as the bit pattern of a half-precision
//                       number so that it sorts as an unsigned key
//   2D_XY               (fx t.x/t.z + cx, fy t.y/t.z + cy)
//   2D_Cov              J Rw Sigma Rw^T J^T + 0.3 I, where Sigma = R S S R^T
//                       (R from the normalised quaternion, S = diag(scale))
//                       and J the Jacobian of the perspective projection with
//                       t.x/t.z, t.y/t.z clamped to +-limx, +-limy
//   conic               inverse of 2D_Cov (what the tile checks and RUs use)
//   radius              ceil(3 sqrt(lambda_max)), lambda_max = mid +
//                       sqrt(max(0.1, mid^2 - det)) (the 3-sigma extent)
//   G_RGB               spherical harmonics of degree 3 evaluated in the
//                       viewing direction (p - camera)/|p - camera|, + 0.5,
//                       clamped to [0, 1]
// A Gaussian that cannot be projected (t.z < 1/64, a singular 2D covariance
// or a centre beyond the +-8192 px coordinate range) leaves with opacity 0
// and depth key 0, so that the culling of the PM removes it.
//
// The list of features and the order of the steps follow the preprocessing
// of the reference 3D Gaussian splatting renderer, which the PM is said to
// keep; the paper names the step but gives no datapath.  The arithmetic is
// this design's own: every quantity is a signed 64-bit fixed-point number
// with 24 fraction bits, with exact products, a restoring divider and a
// restoring square root written as functions.  The evaluated models use
// FP16 instead.
//
// Interface and timing: valid/ready in and out; the calculation is one
// combinational stage followed by the output register, so a Gaussian leaves
// one cycle after it is accepted and one Gaussian can be accepted per cycle.
// The camera (cam) must be held stable while Gaussians are in flight.  This
// single stage is the behavioural form of the datapath; a 1 GHz build would
// split it into pipeline stages, which changes only the latency.
module gstg_feat
  import gstg_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  cam_t    cam,
  input  logic    in_valid,
  output logic    in_ready,
  input  g3d_t    in,
  output logic    out_valid,
  input  logic    out_ready,
  output pm_in_t  out
);
  typedef logic signed [63:0] f_t;   // Q40.24
  localparam f_t ONE    = 64'sd16777216;
  localparam f_t DIL    = 64'sd5033165;   // 0.3 low-pass dilation
  localparam f_t DISC_MIN = 64'sd1677722; // 0.1
  localparam f_t HALF   = 64'sd8388608;
  localparam f_t TZ_MIN = 64'sd262144;    // 1/64
  localparam f_t XY_LIM = 64'sd137438953472; // 8192 px

  // real-valued SH constants times 2^24
  localparam f_t SH_C0   = 64'sd4732765;
  localparam f_t SH_C1   = 64'sd8197390;
  localparam f_t SH_C2_0 = 64'sd18329921,  SH_C2_1 = -64'sd18329921, SH_C2_2 = 64'sd5291392,
                 SH_C2_3 = -64'sd18329921, SH_C2_4 = 64'sd9164961;
  localparam f_t SH_C3_0 = -64'sd9899289,  SH_C3_1 = 64'sd48496413,  SH_C3_2 = -64'sd7667956,
                 SH_C3_3 = 64'sd6260860,   SH_C3_4 = -64'sd7667956,  SH_C3_5 = 64'sd24248206,
                 SH_C3_6 = -64'sd9899289;

  function automatic f_t fmul(input f_t a, input f_t b);
    logic signed [127:0] p;
    p = 128'(a) * 128'(b);
    return f_t'(p >>> 24);
  endfunction

  function automatic f_t fdiv(input f_t a, input f_t b);
    logic signed [127:0] n, d;
    if (b == 0) return '0;
    n = 128'(a) <<< 24;
    d = 128'(b);
    return f_t'(n / d);
  endfunction

  // sqrt of a non-negative Q.48 value into Q.24, digit by digit (restoring).
  function automatic f_t fsqrt48(input logic signed [127:0] v);
    logic [129:0] rem, trial;
    logic [63:0]  root;
    if (v <= 0) return '0;
    rem  = '0;
    root = '0;
    for (int i = 63; i >= 0; i--) begin
      rem   = (rem << 2) | 130'(v[2*i +: 2]);
      trial = {64'b0, root, 2'b01};
      if (rem >= trial) begin
        rem  = rem - trial;
        root = {root[62:0], 1'b1};
      end else begin
        root = {root[62:0], 1'b0};
      end
    end
    return f_t'(root);
  endfunction

  function automatic f_t fsqrt(input f_t a);
    return fsqrt48(128'(a) <<< 24);
  endfunction

  function automatic f_t clampf(input f_t v, input f_t lim);
    if (v > lim)  return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

  // positive Q.24 value -> IEEE half-precision bit pattern (truncated)
  function automatic logic [DEPTH_W-1:0] to_half(input f_t v);
    int msb;
    int e;
    logic [63:0] sh;
    if (v <= 0) return '0;
    msb = 0;
    for (int i = 0; i < 63; i++) if (v[i]) msb = i;
    e = msb - 24 + 15;
    if (e <= 0)  return '0;
    if (e >= 31) return 16'h7bff;
    sh = 64'(v) << (63 - msb);
    return {1'b0, 5'(e), sh[62:53]};
  endfunction

  // ------------------------------------------------------------------
  f_t p [3], tc [3], w [3][3], sc [3], q [4], qn [4], rm [3][3], m [3][3];
  f_t invz, txz, tyz, xs, ys, j00, j02, j11, j12;
  f_t tt [2][3], u [2][3];
  f_t ca, cb, cc, mid, lam, r3, qnorm;
  logic signed [127:0] det, disc;   // Q.48: 2D covariances up to 2^39 px^2
  f_t dv [3], dlen, dx, dy, dz, xx, yy, zz, xy, yz, xz;
  f_t bas [SH_N];
  f_t col [3];
  logic     ok;
  pm_in_t   res;
  f_t       cnv, rad;
  logic [OP_W-1:0] cq;

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      p[i]  = f_t'($signed(in.pos[i])) <<< 8;
      sc[i] = f_t'({32'b0, in.scale[i]});
      for (int j = 0; j < 3; j++) w[i][j] = f_t'($signed(cam.rw[i][j])) >>> 6;
    end
    for (int i = 0; i < 4; i++) q[i] = f_t'($signed(in.rot[i])) <<< 9;

    // camera space
    for (int i = 0; i < 3; i++)
      tc[i] = fmul(w[i][0], p[0]) + fmul(w[i][1], p[1]) + fmul(w[i][2], p[2])
            + (f_t'($signed(cam.tw[i])) <<< 8);
    ok   = (tc[2] >= TZ_MIN);
    invz = ok ? fdiv(ONE, tc[2]) : '0;
    txz  = fmul(tc[0], invz);
    tyz  = fmul(tc[1], invz);
    xs   = fmul(f_t'({32'b0, cam.fx}) <<< 8, txz) + (f_t'($signed(cam.cx)) <<< 8);
    ys   = fmul(f_t'({32'b0, cam.fy}) <<< 8, tyz) + (f_t'($signed(cam.cy)) <<< 8);
    if (xs >= XY_LIM || xs <= -XY_LIM || ys >= XY_LIM || ys <= -XY_LIM) ok = 1'b0;

    // Jacobian with the frustum clamp, T = J W
    j00 = fmul(f_t'({32'b0, cam.fx}) <<< 8, invz);
    j11 = fmul(f_t'({32'b0, cam.fy}) <<< 8, invz);
    j02 = -fmul(j00, clampf(txz, f_t'({32'b0, cam.limx}) <<< 8));
    j12 = -fmul(j11, clampf(tyz, f_t'({32'b0, cam.limy}) <<< 8));
    for (int j = 0; j < 3; j++) begin
      tt[0][j] = fmul(j00, w[0][j]) + fmul(j02, w[2][j]);
      tt[1][j] = fmul(j11, w[1][j]) + fmul(j12, w[2][j]);
    end

    // rotation from the normalised quaternion (w, x, y, z), M = R S
    qnorm = fsqrt(fmul(q[0], q[0]) + fmul(q[1], q[1]) + fmul(q[2], q[2]) + fmul(q[3], q[3]));
    if (qnorm == 0) begin
      qn[0] = ONE; qn[1] = '0; qn[2] = '0; qn[3] = '0;
    end else begin
      for (int i = 0; i < 4; i++) qn[i] = fdiv(q[i], qnorm);
    end
    rm[0][0] = ONE - 2 * (fmul(qn[2], qn[2]) + fmul(qn[3], qn[3]));
    rm[0][1] = 2 * (fmul(qn[1], qn[2]) - fmul(qn[0], qn[3]));
    rm[0][2] = 2 * (fmul(qn[1], qn[3]) + fmul(qn[0], qn[2]));
    rm[1][0] = 2 * (fmul(qn[1], qn[2]) + fmul(qn[0], qn[3]));
    rm[1][1] = ONE - 2 * (fmul(qn[1], qn[1]) + fmul(qn[3], qn[3]));
    rm[1][2] = 2 * (fmul(qn[2], qn[3]) - fmul(qn[0], qn[1]));
    rm[2][0] = 2 * (fmul(qn[1], qn[3]) - fmul(qn[0], qn[2]));
    rm[2][1] = 2 * (fmul(qn[2], qn[3]) + fmul(qn[0], qn[1]));
    rm[2][2] = ONE - 2 * (fmul(qn[1], qn[1]) + fmul(qn[2], qn[2]));
    for (int i = 0; i < 3; i++)
      for (int k = 0; k < 3; k++) m[i][k] = fmul(rm[i][k], sc[k]);

    // 2D covariance = (T M)(T M)^T + 0.3 I; T M first keeps small scales precise
    for (int i = 0; i < 2; i++)
      for (int k = 0; k < 3; k++)
        u[i][k] = fmul(tt[i][0], m[0][k]) + fmul(tt[i][1], m[1][k]) + fmul(tt[i][2], m[2][k]);
    ca  = fmul(u[0][0], u[0][0]) + fmul(u[0][1], u[0][1]) + fmul(u[0][2], u[0][2]) + DIL;
    cb  = fmul(u[0][0], u[1][0]) + fmul(u[0][1], u[1][1]) + fmul(u[0][2], u[1][2]);
    cc  = fmul(u[1][0], u[1][0]) + fmul(u[1][1], u[1][1]) + fmul(u[1][2], u[1][2]) + DIL;
    det = 128'(ca) * 128'(cc) - 128'(cb) * 128'(cb);
    if (det <= 0) ok = 1'b0;
    mid  = (ca + cc) >>> 1;
    disc = 128'(mid) * 128'(mid) - det;
    if (disc < (128'(DISC_MIN) <<< 24)) disc = 128'(DISC_MIN) <<< 24;
    lam  = mid + fsqrt48(disc);
    r3   = 3 * fsqrt(lam);
    rad  = (r3 + ONE - 1) >>> 24;

    // spherical harmonics in the viewing direction
    for (int i = 0; i < 3; i++) dv[i] = p[i] - (f_t'($signed(cam.campos[i])) <<< 8);
    dlen = fsqrt(fmul(dv[0], dv[0]) + fmul(dv[1], dv[1]) + fmul(dv[2], dv[2]));
    dx = fdiv(dv[0], dlen); dy = fdiv(dv[1], dlen); dz = fdiv(dv[2], dlen);
    xx = fmul(dx, dx); yy = fmul(dy, dy); zz = fmul(dz, dz);
    xy = fmul(dx, dy); yz = fmul(dy, dz); xz = fmul(dx, dz);
    bas[0]  = SH_C0;
    bas[1]  = -fmul(SH_C1, dy);
    bas[2]  = fmul(SH_C1, dz);
    bas[3]  = -fmul(SH_C1, dx);
    bas[4]  = fmul(SH_C2_0, xy);
    bas[5]  = fmul(SH_C2_1, yz);
    bas[6]  = fmul(SH_C2_2, 2 * zz - xx - yy);
    bas[7]  = fmul(SH_C2_3, xz);
    bas[8]  = fmul(SH_C2_4, xx - yy);
    bas[9]  = fmul(SH_C3_0, fmul(dy, 3 * xx - yy));
    bas[10] = fmul(SH_C3_1, fmul(xy, dz));
    bas[11] = fmul(SH_C3_2, fmul(dy, 4 * zz - xx - yy));
    bas[12] = fmul(SH_C3_3, fmul(dz, 2 * zz - 3 * xx - 3 * yy));
    bas[13] = fmul(SH_C3_4, fmul(dx, 4 * zz - xx - yy));
    bas[14] = fmul(SH_C3_5, fmul(dz, xx - yy));
    bas[15] = fmul(SH_C3_6, fmul(dx, xx - 3 * yy));
    for (int c = 0; c < 3; c++) begin
      col[c] = HALF;
      for (int k = 0; k < SH_N; k++)
        col[c] = col[c] + fmul(bas[k], f_t'($signed(in.shc[3 * k + c])) <<< 12);
    end

    // pack
    res          = '0;
    res.g.gidx   = in.gidx;
    res.g.x      = xy_t'((xs + (64'sd1 <<< 19)) >>> 20);
    res.g.y      = xy_t'((ys + (64'sd1 <<< 19)) >>> 20);
    res.g.ca     = (det > 0) ? con_t'((128'(cc) <<< 48) / det) : '0;
    res.g.cb     = (det > 0) ? con_t'((128'(-cb) <<< 48) / det) : '0;
    res.g.cc     = (det > 0) ? con_t'((128'(ca) <<< 48) / det) : '0;
    res.g.opac   = ok ? in.opac : '0;
    res.g.depth  = ok ? to_half(tc[2]) : '0;
    res.radius   = (rad > f_t'((1 << RAD_W) - 1)) ? '1 : RAD_W'(rad);
    for (int c = 0; c < 3; c++) begin
      cnv = col[c] >>> 8;                 // Q.24 -> Q.16
      if (cnv < 0)             cq = '0;
      else if (cnv > 64'sd65535) cq = 16'hffff;
      else                     cq = OP_W'(cnv);
      case (c)
        0:       res.g.r = cq;
        1:       res.g.g = cq;
        default: res.g.b = cq;
      endcase
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out <= res;
    end
  end
endmodule
