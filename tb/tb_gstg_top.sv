// tb_gstg_top: one whole frame through the accelerator at its default
// parameters (4 PMs, 4 cores, 1344-entry group memories).
//
// The testbench plays the off-chip memory: it feeds 3D Gaussians to the four
// PMs round robin (a pinhole camera at the origin, focal length 256 px; each
// Gaussian is built so that it projects to a chosen screen ellipse and its
// depth is a chosen FP16 key), records the screen-space features each PM
// computes, gathers their (group, Gaussian) output into one list per
// 64x64 group in arrival order, then streams each group's list into core
// (group number mod 4) and collects the pixels.  The 256x192 frame (4x3
// groups) holds random Gaussians of all sizes, some that must be culled, an
// opaque patch (early exit) and a cluster of 1400 small Gaussians in one
// group (more than a group memory holds).  Every pixel is compared with a
// reference that blends, in depth order, every visible Gaussian whose
// bounding box reaches the pixel's group (the PM's rule), with no tiles or
// bitmasks; for the over-full group the reference
// uses the first 1344 entries of that group's list.  Each mechanism (cull,
// a Gaussian in several groups, bitmask filtering, early exit, FIFO back-
// pressure, fill/raster overlap, group overflow) must occur at least once.
module tb_gstg_top;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 1344, W = 256, H = 192, NGX = 4, NGY = 3, NG = 1730;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PIX_W-1:0] img_w = PIX_W'(W), img_h = PIX_W'(H);
  logic [3:0] gs_in_valid, gs_in_ready, pm_out_valid, pm_out_ready;
  g3d_t   gs_in [4];
  cam_t   cam;
  grp_item_t pm_out [4];
  logic [3:0] core_in_valid, core_in_ready, core_in_last, pix_valid, pix_ready;
  grp_item_t core_in [4];
  pixel_t pix [4];
  logic idle;
  logic [3:0][31:0] n_culled, n_pairs, n_groups, n_overflow, n_filtered, n_skipped, n_fifo_stall, n_overlap;
  int checks = 0, failures = 0;

  gstg_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real F = 256.0;   // focal length in pixels; camera at the origin looking along +z
  pm_in_t gs [$];              // screen-space features, as computed by the PMs
  g3d_t   g3 [$];              // the 3D Gaussians fed in
  bit     visible [$];
  pm_in_t fcap [0:NG-1];       // features captured at the PM outputs
  int     glist [NGY][NGX][$];   // gidx per group, in arrival order
  int     got_r [H][W], got_g [H][W], got_b [H][W];
  bit     got [H][W];
  int     nwritten = 0, pm_done = 0;

  // A 3D Gaussian that projects to roughly the wanted screen ellipse: depth z
  // is the value of the FP16 key, the centre is back-projected through the
  // pinhole camera, the two large axes are the screen sigmas scaled by z/F,
  // the third is thin, and the rotation is a random turn about the view axis.
  // SH degree 0 only (colour = 0.5 + C0 * dc), random.
  function automatic g3d_t to3d(int gidx, real cx, real cy, real sx, real sy, int op, int dep);
    g3d_t g;
    real z, th;
    int  e;
    e = (dep >> 10) & 31;
    z = (1.0 + (dep & 1023) / 1024.0) * $pow(2.0, e - 15);
    th = $urandom_range(0, 6283) / 1000.0;
    g = '0;
    g.gidx     = GIDX_W'(gidx);
    g.pos[0]   = 32'($rtoi(cx * z / F * 65536.0));
    g.pos[1]   = 32'($rtoi(cy * z / F * 65536.0));
    g.pos[2]   = 32'($rtoi(z * 65536.0));
    g.scale[0] = 32'($rtoi(sx * z / F * 16777216.0));
    g.scale[1] = 32'($rtoi(sy * z / F * 16777216.0));
    g.scale[2] = 32'($rtoi(0.02 * z / F * 16777216.0));
    g.rot[0]   = 16'($rtoi($cos(th / 2.0) * 32767.0));
    g.rot[3]   = 16'($rtoi($sin(th / 2.0) * 32767.0));
    g.opac     = OP_W'(op);
    for (int c = 0; c < 3; c++) g.shc[c] = 16'($rtoi(($urandom_range(0, 1000) / 1000.0 - 0.5) / 0.28209479 * 4096.0));
    return g;
  endfunction

  // the PM's bounding box: whole-pixel centre +- radius, in groups
  function automatic bit box_hits(pm_in_t p, int gx, int gy);
    int cx, cy, r;
    cx = int'($signed(p.g.x)) >>> XY_FRAC;
    cy = int'($signed(p.g.y)) >>> XY_FRAC;
    r  = int'(p.radius);
    return ((cx - r) >>> 6) <= gx && ((cx + r) >>> 6) >= gx &&
           ((cy - r) >>> 6) <= gy && ((cy + r) >>> 6) >= gy;
  endfunction

  function automatic void add(real cx, real cy, real sx, real sy, int op, int dep, bit vis);
    pm_in_t p;
    p = make_gauss(gs.size(), cx, cy, sx, sy, $urandom_range(0, 6283) / 1000.0, op,
                   int'($urandom_range(0, 65535)), int'($urandom_range(0, 65535)),
                   int'($urandom_range(0, 65535)), dep);
    gs.push_back(p);
    g3.push_back(to3d(p.g.gidx, cx, cy, sx, sy, op, dep));
    visible.push_back(vis);
  endfunction

  // memory side: gather PM output, collect pixels; the screen-space features
  // each PM computes are recorded (the feature calculation itself is checked
  // against a real-valued model in its own testbench)
  for (genvar i = 0; i < 4; i++) begin : g_mem
    logic   f_fire;
    pm_in_t f_data;
    assign f_fire = dut.g_pm[i].f_valid && dut.g_pm[i].f_ready;
    assign f_data = dut.g_pm[i].f_out;
    always @(negedge clk)
      if (f_fire) fcap[int'(f_data.g.gidx)] <= f_data;
    always @(posedge clk) pm_out_ready[i] <= ($urandom_range(0, 3) != 0);
    always @(posedge clk) pix_ready[i]    <= ($urandom_range(0, 3) != 0);
    always @(negedge clk) begin
      if (pm_out_valid[i] && pm_out_ready[i])
        glist[pm_out[i].gy][pm_out[i].gx].push_back(int'(pm_out[i].g.gidx));
      if (pix_valid[i] && pix_ready[i]) begin
        if (got[pix[i].y][pix[i].x]) begin failures++; $display("pixel written twice"); end
        got[pix[i].y][pix[i].x] = 1;
        got_r[pix[i].y][pix[i].x] = int'(pix[i].r);
        got_g[pix[i].y][pix[i].x] = int'(pix[i].g);
        got_b[pix[i].y][pix[i].x] = int'(pix[i].b);
        nwritten++;
      end
    end
  end

  task automatic feed_pm(int i);
    for (int k = i; k < gs.size(); k += 4) begin
      @(negedge clk);
      gs_in[i] = g3[k]; gs_in_valid[i] = 1;
      #1;
      while (!gs_in_ready[i]) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    gs_in_valid[i] = 0;
  endtask

  task automatic feed_core(int c);
    for (int gidx = c; gidx < NGX * NGY; gidx += 4) begin
      int gx, gy;
      gx = gidx % NGX; gy = gidx / NGX;
      for (int k = 0; k < glist[gy][gx].size(); k++) begin
        @(negedge clk);
        core_in[c] = '{gx: GC_W'(gx), gy: GC_W'(gy), g: gs[glist[gy][gx][k]].g};
        core_in_last[c] = (k == glist[gy][gx].size() - 1);
        core_in_valid[c] = 1;
        #1;
        while (!core_in_ready[c]) begin @(negedge clk); #1; end
      end
      @(negedge clk);
      core_in_valid[c] = 0; core_in_last[c] = 0;
    end
  endtask

  initial begin
    int exp_n, nvis, sum_pairs;
    gs_in_valid = '0; core_in_valid = '0; core_in_last = '0;
    for (int i = 0; i < 4; i++) begin gs_in[i] = '0; core_in[i] = '0; end
    cam = '0;
    for (int i = 0; i < 3; i++) cam.rw[i][i] = 32'sd1073741824;
    cam.fx = 32'($rtoi(F * 65536.0)); cam.fy = cam.fx;
    cam.limx = 32'd262144; cam.limy = 32'd262144;   // 4.0: no frustum clamp in this view
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) got[y][x] = 0;
    // scene (depth keys unique: 0x3400 + 2*index)
    for (int k = 0; k < 260; k++)
      add($urandom_range(0, 2700) / 10.0 - 7.0, $urandom_range(0, 2060) / 10.0 - 7.0,
          0.5 + $urandom_range(0, 200) / 10.0, 0.5 + $urandom_range(0, 200) / 10.0,
          int'($urandom_range(300, 65000)), 16'h3400 + 2 * gs.size(), 1);
    for (int k = 0; k < 40; k++)   // opaque patch in group (1,1)
      add(64 + $urandom_range(0, 640) / 10.0, 64 + $urandom_range(0, 640) / 10.0, 25.0, 25.0,
          64000, 16'h3400 + 2 * gs.size(), 1);
    for (int k = 0; k < 10; k++)   // culled: too transparent, behind the near plane, off screen
      add(100.0, 100.0, 5.0, 5.0, 100, 16'h3400 + 2 * gs.size(), 0);
    for (int k = 0; k < 10; k++)
      add(100.0, 100.0, 5.0, 5.0, 30000, 16'h3000, 0);
    for (int k = 0; k < 10; k++)
      add(-300.0, 100.0, 5.0, 5.0, 30000, 16'h3400 + 2 * gs.size(), 0);
    for (int k = 0; k < 1400; k++) // over-full group (3,2)
      add(192 + 4 + $urandom_range(0, 560) / 10.0, 128 + 4 + $urandom_range(0, 560) / 10.0,
          0.6 + $urandom_range(0, 8) / 10.0, 0.6 + $urandom_range(0, 8) / 10.0,
          int'($urandom_range(300, 65000)), 16'h3400 + 2 * gs.size(), 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // preprocessing phase
    fork
      feed_pm(0); feed_pm(1); feed_pm(2); feed_pm(3);
    join
    repeat (4) @(negedge clk);
    #1;
    while (!idle) begin @(negedge clk); #1; end
    repeat (10) @(negedge clk);
    checks++;
    if (gs.size() != NG) begin failures++; $display("scene size %0d", gs.size()); end
    for (int k = 0; k < gs.size(); k++) gs[k] = fcap[k];
    // rendering phase
    fork
      feed_core(0); feed_core(1); feed_core(2); feed_core(3);
    join
    #1;
    while (!idle) begin @(negedge clk); #1; end
    repeat (400) @(negedge clk);
    $display("frame done at cycle %0d", int'($time / 10));

    // reference
    exp_n = 0;
    for (int gy = 0; gy < NGY; gy++) for (int gx = 0; gx < NGX; gx++) begin
      int ord [$];
      ord.delete();
      if (glist[gy][gx].size() > N) begin
        for (int k = 0; k < N; k++) ord.push_back(glist[gy][gx][k]);
      end else begin
        // every visible Gaussian of the frame whose box reaches the group
        for (int k = 0; k < gs.size(); k++)
          if (visible[k] && box_hits(gs[k], gx, gy))
            ord.push_back(k);
      end
      ord.sort() with (int'(gs[item].g.depth));
      for (int y = gy * 64; y < gy * 64 + 64; y++)
        for (int x = gx * 64; x < gx * 64 + 64; x++) begin
          px_state_t s;
          s = px_init();
          foreach (ord[k]) s = px_blend(s, gs[ord[k]].g, x, y);
          checks++;
          exp_n++;
          if (!got[y][x]) begin
            // groups no Gaussian reaches are never sent: their pixels stay background
            if (s.r != 0 || s.g != 0 || s.b != 0) begin failures++; $display("pixel %0d,%0d missing", x, y); end
          end else if (got_r[y][x] != sat16(s.r) || got_g[y][x] != sat16(s.g) || got_b[y][x] != sat16(s.b)) begin
            failures++;
            if (failures < 10) $display("pixel %0d,%0d got %0d exp %0d", x, y, got_r[y][x], sat16(s.r));
          end
        end
    end
    // mechanisms
    nvis = 0;
    foreach (visible[k]) if (visible[k]) nvis++;
    sum_pairs = 0;
    for (int i = 0; i < 4; i++) sum_pairs += int'(n_pairs[i]);
    begin
      int c_cull, c_ovf, c_filt, c_skip, c_stall, c_ovl, c_grp;
      c_cull = 0; c_ovf = 0; c_filt = 0; c_skip = 0; c_stall = 0; c_ovl = 0; c_grp = 0;
      for (int i = 0; i < 4; i++) begin
        c_cull += int'(n_culled[i]); c_ovf += int'(n_overflow[i]); c_filt += int'(n_filtered[i]);
        c_skip += int'(n_skipped[i]); c_stall += int'(n_fifo_stall[i]); c_ovl += int'(n_overlap[i]);
        c_grp += int'(n_groups[i]);
      end
      $display("culled=%0d pairs=%0d visible=%0d groups=%0d overflow=%0d filtered=%0d early_exit_skips=%0d fifo_stall=%0d overlap=%0d",
               c_cull, sum_pairs, nvis, c_grp, c_ovf, c_filt, c_skip, c_stall, c_ovl);
      checks++; if (c_cull != 30) begin failures++; $display("cull count"); end
      checks++; if (sum_pairs <= nvis) begin failures++; $display("no Gaussian in several groups"); end
      checks++; if (c_ovf == 0) begin failures++; $display("no overflow"); end
      checks++; if (c_filt == 0) begin failures++; $display("no bitmask filtering"); end
      checks++; if (c_skip == 0) begin failures++; $display("no early exit"); end
      checks++; if (c_stall == 0) begin failures++; $display("no FIFO back-pressure"); end
      checks++; if (c_ovl == 0) begin failures++; $display("no fill/raster overlap"); end
      checks++; if (c_grp != NGX * NGY) begin failures++; $display("groups %0d", c_grp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
