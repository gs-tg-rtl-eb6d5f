// tb_gstg_feat: checks the feature calculation against a real-valued model.
//
// A random camera (yaw and pitch rotation, translation, focal length) is set
// per batch; Gaussians are placed in camera space (mostly in view, some far
// off to the side so the frustum clamp of the Jacobian acts, some behind the
// camera) and mapped back to world space.  Scales span three decades,
// rotations and spherical-harmonics coefficients are random.  The model
// recomputes every feature in double precision from the same quantised
// inputs and the outputs must agree within: 1/16 px for the position, a
// relative 2e-3 for the conic, 1 px for the radius, one unit of the FP16
// depth key, 24/65536 for the colours; Gaussians behind the camera must leave
// with opacity 0.  The output must follow each accepted input after one
// cycle, with random back-pressure.
module tb_gstg_feat;
  import gstg_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cam_t   cam;
  logic   in_valid = 0, in_ready, out_valid, out_ready = 1;
  g3d_t   in;
  pm_in_t out;

  gstg_feat dut (.*);

  int checks = 0, failures = 0;
  int n_clamp = 0, n_behind = 0;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * ($urandom % 1000001) / 1000000.0;
  endfunction

  function automatic real q16(logic signed [31:0] v); return real'(v) / 65536.0; endfunction

  // ---------------- camera ----------------
  real Rw [3][3], Tw [3], FX, FY, CX, CY, LX, LY, CP [3];

  task automatic new_camera();
    real yaw, pitch, cy_, sy_, cp_, sp_;
    real r [3][3];
    yaw = urand(-3.1, 3.1); pitch = urand(-0.5, 0.5);
    cy_ = $cos(yaw); sy_ = $sin(yaw); cp_ = $cos(pitch); sp_ = $sin(pitch);
    // R = Rx(pitch) * Ry(yaw)
    r[0][0] = cy_;        r[0][1] = 0.0;  r[0][2] = sy_;
    r[1][0] = sp_ * sy_;  r[1][1] = cp_;  r[1][2] = -sp_ * cy_;
    r[2][0] = -cp_ * sy_; r[2][1] = sp_;  r[2][2] = cp_ * cy_;
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        cam.rw[i][j] = 32'($rtoi(r[i][j] * 1073741824.0));
        Rw[i][j] = real'($signed(cam.rw[i][j])) / 1073741824.0;
      end
      cam.tw[i] = 32'($rtoi(urand(-5.0, 5.0) * 65536.0));
      Tw[i] = q16(cam.tw[i]);
    end
    FX = urand(400.0, 1600.0); FY = FX * urand(0.95, 1.05);
    cam.fx = 32'($rtoi(FX * 65536.0)); FX = real'(cam.fx) / 65536.0;
    cam.fy = 32'($rtoi(FY * 65536.0)); FY = real'(cam.fy) / 65536.0;
    cam.cx = 32'($rtoi(urand(200.0, 1000.0) * 65536.0)); CX = q16(cam.cx);
    cam.cy = 32'($rtoi(urand(200.0, 600.0) * 65536.0));  CY = q16(cam.cy);
    cam.limx = 32'($rtoi(1.3 * CX / FX * 65536.0)); LX = real'(cam.limx) / 65536.0;
    cam.limy = 32'($rtoi(1.3 * CY / FY * 65536.0)); LY = real'(cam.limy) / 65536.0;
    // camera centre = -R^T t
    for (int i = 0; i < 3; i++) begin
      real s = 0.0;
      for (int k = 0; k < 3; k++) s -= Rw[k][i] * Tw[k];
      cam.campos[i] = 32'($rtoi(s * 65536.0));
      CP[i] = q16(cam.campos[i]);
    end
  endtask

  // ---------------- random Gaussian ----------------
  function automatic g3d_t new_gauss(int id, int kind);
    g3d_t g;
    real t [3], p [3];
    g = '0;
    g.gidx = GIDX_W'(id);
    t[2] = (kind == 2) ? urand(-5.0, -0.5) : urand(0.3, 30.0);
    if (kind == 1) begin
      t[0] = t[2] * urand(2.0, 4.0) * (($urandom % 2) ? 1.0 : -1.0);
      t[1] = t[2] * urand(-0.5, 0.5);
    end else begin
      t[0] = t[2] * urand(-0.9, 0.9) * CX / FX;
      t[1] = t[2] * urand(-0.9, 0.9) * CY / FY;
    end
    for (int i = 0; i < 3; i++) begin
      p[i] = 0.0;
      for (int k = 0; k < 3; k++) p[i] += Rw[k][i] * (t[k] - Tw[k]);
      g.pos[i] = 32'($rtoi(p[i] * 65536.0));
      g.scale[i] = 32'($rtoi($pow(10.0, urand(-3.0, 0.3)) * 16777216.0));
    end
    for (int i = 0; i < 4; i++) g.rot[i] = 16'($rtoi(urand(-0.99, 0.99) * 32768.0));
    g.opac = 16'($urandom_range(1000, 65535));
    for (int k = 0; k < 3 * SH_N; k++)
      g.shc[k] = 16'($rtoi(urand(k < 3 ? -2.0 : -0.6, k < 3 ? 2.0 : 0.6) * 4096.0));
    return g;
  endfunction

  // ---------------- reference ----------------
  typedef struct {
    bit  ok;
    real x, y, ca, cb, cc, rad, z, r, g, b;
  } ref_t;

  function automatic ref_t model(g3d_t g);
    ref_t o;
    real p [3], t [3], q [4], n, R [3][3], M [3][3], T [2][3], U [2][3];
    real a, b, c, det, mid, lam, j00, j02, j11, j12, txz, tyz, d [3], dl;
    real x, y, z, xx, yy, zz, bs [16], col;
    for (int i = 0; i < 3; i++) p[i] = q16(g.pos[i]);
    for (int i = 0; i < 3; i++) t[i] = Rw[i][0] * p[0] + Rw[i][1] * p[1] + Rw[i][2] * p[2] + Tw[i];
    o.z  = t[2];
    o.ok = (t[2] >= 1.0 / 64.0);
    if (!o.ok) return o;
    txz = t[0] / t[2]; tyz = t[1] / t[2];
    o.x = FX * txz + CX; o.y = FY * tyz + CY;
    j00 = FX / t[2]; j11 = FY / t[2];
    j02 = -j00 * ((txz > LX) ? LX : (txz < -LX) ? -LX : txz);
    j12 = -j11 * ((tyz > LY) ? LY : (tyz < -LY) ? -LY : tyz);
    for (int j = 0; j < 3; j++) begin
      T[0][j] = j00 * Rw[0][j] + j02 * Rw[2][j];
      T[1][j] = j11 * Rw[1][j] + j12 * Rw[2][j];
    end
    for (int i = 0; i < 4; i++) q[i] = real'($signed(g.rot[i])) / 32768.0;
    n = $sqrt(q[0]*q[0] + q[1]*q[1] + q[2]*q[2] + q[3]*q[3]);
    for (int i = 0; i < 4; i++) q[i] /= n;
    R[0][0] = 1 - 2*(q[2]*q[2] + q[3]*q[3]); R[0][1] = 2*(q[1]*q[2] - q[0]*q[3]); R[0][2] = 2*(q[1]*q[3] + q[0]*q[2]);
    R[1][0] = 2*(q[1]*q[2] + q[0]*q[3]); R[1][1] = 1 - 2*(q[1]*q[1] + q[3]*q[3]); R[1][2] = 2*(q[2]*q[3] - q[0]*q[1]);
    R[2][0] = 2*(q[1]*q[3] - q[0]*q[2]); R[2][1] = 2*(q[2]*q[3] + q[0]*q[1]); R[2][2] = 1 - 2*(q[1]*q[1] + q[2]*q[2]);
    for (int i = 0; i < 3; i++)
      for (int k = 0; k < 3; k++) M[i][k] = R[i][k] * real'(g.scale[k]) / 16777216.0;
    for (int i = 0; i < 2; i++)
      for (int k = 0; k < 3; k++) U[i][k] = T[i][0]*M[0][k] + T[i][1]*M[1][k] + T[i][2]*M[2][k];
    a = U[0][0]*U[0][0] + U[0][1]*U[0][1] + U[0][2]*U[0][2] + 0.3;
    b = U[0][0]*U[1][0] + U[0][1]*U[1][1] + U[0][2]*U[1][2];
    c = U[1][0]*U[1][0] + U[1][1]*U[1][1] + U[1][2]*U[1][2] + 0.3;
    det = a*c - b*b;
    o.ca = c / det; o.cb = -b / det; o.cc = a / det;
    mid = 0.5 * (a + c);
    lam = mid + $sqrt((mid*mid - det > 0.1) ? mid*mid - det : 0.1);
    o.rad = $ceil(3.0 * $sqrt(lam));
    if (o.rad > 4095.0) o.rad = 4095.0;
    for (int i = 0; i < 3; i++) d[i] = p[i] - CP[i];
    dl = $sqrt(d[0]*d[0] + d[1]*d[1] + d[2]*d[2]);
    x = d[0] / dl; y = d[1] / dl; z = d[2] / dl;
    xx = x*x; yy = y*y; zz = z*z;
    bs[0] = 0.28209479177387814;
    bs[1] = -0.4886025119029199 * y; bs[2] = 0.4886025119029199 * z; bs[3] = -0.4886025119029199 * x;
    bs[4] = 1.0925484305920792 * x*y; bs[5] = -1.0925484305920792 * y*z;
    bs[6] = 0.31539156525252005 * (2*zz - xx - yy); bs[7] = -1.0925484305920792 * x*z;
    bs[8] = 0.5462742152960396 * (xx - yy);
    bs[9]  = -0.5900435899266435 * y * (3*xx - yy);
    bs[10] = 2.890611442640554 * x*y*z;
    bs[11] = -0.4570457994644658 * y * (4*zz - xx - yy);
    bs[12] = 0.3731763325901154 * z * (2*zz - 3*xx - 3*yy);
    bs[13] = -0.4570457994644658 * x * (4*zz - xx - yy);
    bs[14] = 1.445305721320277 * z * (xx - yy);
    bs[15] = -0.5900435899266435 * x * (xx - 3*yy);
    for (int ch = 0; ch < 3; ch++) begin
      col = 0.5;
      for (int k = 0; k < 16; k++) col += bs[k] * real'($signed(g.shc[3*k + ch])) / 4096.0;
      col = (col < 0.0) ? 0.0 : (col > 65535.0/65536.0) ? 65535.0/65536.0 : col;
      if (ch == 0) o.r = col; else if (ch == 1) o.g = col; else o.b = col;
    end
    if (txz > LX || txz < -LX) n_clamp++;
    return o;
  endfunction

  function automatic int half_key(real v);
    int e;
    real m;
    if (v <= 0.0) return 0;
    e = 0; m = v;
    while (m >= 2.0) begin m /= 2.0; e++; end
    while (m < 1.0)  begin m *= 2.0; e--; end
    return ((e + 15) << 10) | int'($floor((m - 1.0) * 1024.0));
  endfunction

  task automatic chk(bit cond, string what, int id);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL gidx %0d: %s", id, what);
    end
  endtask

  function automatic real relerr(real d, real r, real scale);
    return ((d - r) < 0 ? r - d : d - r) / scale;
  endfunction

  // ---------------- stimulus / response ----------------
  g3d_t   sent [$];
  int     acc_cyc [$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) out_ready <= ($urandom % 4) != 0;

  // collect
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin : collect
    g3d_t g; ref_t r; int c0; real sc;
    g  = sent.pop_front();
    c0 = acc_cyc.pop_front();
    chk(out.g.gidx == g.gidx, "order", int'(g.gidx));
    r = model(g);
    if (!r.ok) begin
      n_behind++;
      chk(out.g.opac == 0, "behind camera not culled", int'(g.gidx));
    end else begin
      chk(out.g.opac == g.opac, "opacity", int'(g.gidx));
      chk(relerr(real'($signed(out.g.x)) / 16.0, r.x, 1.0) <= 0.07, $sformatf("x %f vs %f", real'($signed(out.g.x)) / 16.0, r.x), int'(g.gidx));
      chk(relerr(real'($signed(out.g.y)) / 16.0, r.y, 1.0) <= 0.07, "y", int'(g.gidx));
      sc = ((r.ca > r.cc) ? r.ca : r.cc);
      chk(relerr(real'($signed(out.g.ca)) / 16777216.0, r.ca, sc) <= 2e-3 + 8.0 / 16777216.0 / sc, $sformatf("conic a %f vs %f", real'($signed(out.g.ca)) / 16777216.0, r.ca), int'(g.gidx));
      chk(relerr(real'($signed(out.g.cb)) / 16777216.0, r.cb, sc) <= 2e-3 + 8.0 / 16777216.0 / sc, "conic b", int'(g.gidx));
      chk(relerr(real'($signed(out.g.cc)) / 16777216.0, r.cc, sc) <= 2e-3 + 8.0 / 16777216.0 / sc, "conic c", int'(g.gidx));
      chk(relerr(real'(out.radius), r.rad, 1.0) <= 1.0, $sformatf("radius %0d vs %f", out.radius, r.rad), int'(g.gidx));
      chk(relerr(real'(out.g.depth), real'(half_key(r.z)), 1.0) <= 1.0, $sformatf("depth %h vs %h", out.g.depth, half_key(r.z)), int'(g.gidx));
      chk(relerr(real'(out.g.r) / 65536.0, r.r, 1.0) <= 24.0 / 65536.0, $sformatf("red %f vs %f", real'(out.g.r) / 65536.0, r.r), int'(g.gidx));
      chk(relerr(real'(out.g.g) / 65536.0, r.g, 1.0) <= 24.0 / 65536.0, "green", int'(g.gidx));
      chk(relerr(real'(out.g.b) / 65536.0, r.b, 1.0) <= 24.0 / 65536.0, "blue", int'(g.gidx));
    end
  end

  // latency: an output appears exactly one cycle after each acceptance
  logic acc_d = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (acc_d) begin
        checks++;
        if (!out_valid) begin failures++; $display("FAIL latency"); end
      end
      acc_d <= in_valid && in_ready;
    end
  end

  initial begin
    int id = 0;
    cam = '0;
    in  = '0;
    new_camera();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 8; batch++) begin
      // let the pipeline drain before the camera changes
      in_valid = 0;
      wait (sent.size() == 0);
      @(negedge clk);
      new_camera();
      for (int i = 0; i < 250; i++) begin
        int kind;
        kind = ($urandom % 10 == 0) ? 2 : ($urandom % 10 == 0) ? 1 : 0;
        in = new_gauss(id, kind);
        in_valid = 1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        sent.push_back(in);
        acc_cyc.push_back(cyc);
        @(negedge clk);
        id++;
        if ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      end
    end
    in_valid = 0;
    wait (sent.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    if (n_clamp == 0 || n_behind == 0) begin
      failures++;
      $display("FAIL: frustum clamp (%0d) or behind-camera (%0d) case never seen", n_clamp, n_behind);
    end
    $display("feature calc: %0d Gaussians, %0d clamped, %0d behind camera", id, n_clamp, n_behind);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
