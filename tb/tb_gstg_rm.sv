// tb_gstg_rm: the rasterization module on whole groups.  The testbench plays
// the group shared memory (features, random Tile_Bitmasks, a sorted list)
// and checks every written pixel against the fixed-point reference that
// blends, for each tile, the sorted Gaussians whose bitmask has the tile's
// bit set.  One group is dense and opaque so that early exit skips indices;
// the FIFO must apply back-pressure; pixels beyond the 150x100 frame are
// not written.
module tb_gstg_rm;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 1344, LW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, pix_valid, pix_ready;
  logic [LW:0] cnt, rd_pos;
  logic [GC_W-1:0] gx, gy;
  logic [PIX_W-1:0] img_w, img_h;
  logic [7:0][LW-1:0] rd_sidx;
  logic [7:0][NTILES-1:0] rd_bmask;
  logic [LW-1:0] feat_addr;
  gauss_t feat;
  pixel_t pix;
  logic [31:0] n_filtered, n_skipped, n_fifo_stall;
  int checks = 0, failures = 0;

  gstg_rm #(.N(N)) dut (.*);

  gauss_t            mf [N];
  logic [NTILES-1:0] mb [N];
  int                ms [N];
  int                ng;

  always_comb begin
    for (int j = 0; j < 8; j++) begin
      int p;
      p = int'(rd_pos) + j;
      rd_sidx[j]  = (p < N) ? LW'(ms[p]) : '0;
      rd_bmask[j] = mb[rd_sidx[j]];
    end
    feat = mf[feat_addr];
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_col [64][64][3];
  bit seen [64][64];
  int nseen;
  always @(posedge clk) pix_ready <= ($urandom_range(0, 7) != 0);
  always @(negedge clk) if (pix_valid && pix_ready) begin
    int lx, ly;
    lx = int'(pix.x) - int'(gx) * 64; ly = int'(pix.y) - int'(gy) * 64;
    checks++;
    if (lx < 0 || lx > 63 || ly < 0 || ly > 63 || pix.x >= img_w || pix.y >= img_h || seen[ly][lx]) begin
      failures++; $display("bad pixel %0d,%0d", pix.x, pix.y);
    end else begin
      seen[ly][lx] = 1; nseen++;
      if (int'(pix.r) != exp_col[ly][lx][0] || int'(pix.g) != exp_col[ly][lx][1] ||
          int'(pix.b) != exp_col[ly][lx][2]) begin
        failures++;
        if (failures < 10) $display("pixel %0d,%0d got %0d exp %0d", pix.x, pix.y, pix.r, exp_col[ly][lx][0]);
      end
    end
  end

  task automatic run_group(int n, int ggx, int ggy, bit opaque);
    int order [$];
    int exp_n;
    ng = n;
    for (int i = 0; i < n; i++) begin
      pm_in_t p;
      p = make_gauss(i, ggx * 64 + $urandom_range(0, 640) / 10.0, ggy * 64 + $urandom_range(0, 640) / 10.0,
                     opaque ? 25.0 : 0.5 + $urandom_range(0, 120) / 10.0,
                     opaque ? 25.0 : 0.5 + $urandom_range(0, 120) / 10.0,
                     $urandom_range(0, 6283) / 1000.0,
                     opaque ? 65000 : int'($urandom_range(300, 65000)),
                     int'($urandom_range(0, 65535)), int'($urandom_range(0, 65535)),
                     int'($urandom_range(0, 65535)), int'($urandom_range(0, 65535)));
      mf[i] = p.g;
      mb[i] = opaque ? 16'hffff : NTILES'($urandom);
      order.push_back(i);
    end
    order.shuffle();
    for (int i = 0; i < n; i++) ms[i] = order[i];
    // reference
    for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) begin
      px_state_t s;
      int t;
      t = (y / 16) * 4 + (x / 16);
      s = px_init();
      for (int i = 0; i < n; i++)
        if (mb[ms[i]][15 - t]) s = px_blend(s, mf[ms[i]], ggx * 64 + x, ggy * 64 + y);
      exp_col[y][x][0] = sat16(s.r); exp_col[y][x][1] = sat16(s.g); exp_col[y][x][2] = sat16(s.b);
      seen[y][x] = 0;
    end
    exp_n = 0;
    for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++)
      if (ggx * 64 + x < int'(img_w) && ggy * 64 + y < int'(img_h)) exp_n++;
    nseen = 0;
    @(negedge clk);
    gx = GC_W'(ggx); gy = GC_W'(ggy); cnt = (LW+1)'(n); start = 1;
    @(negedge clk); start = 0;
    while (nseen < exp_n) @(negedge clk);
    while (busy) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (nseen != exp_n) begin failures++; $display("wrote %0d of %0d", nseen, exp_n); end
  endtask

  initial begin
    start = 0; cnt = '0; gx = '0; gy = '0; img_w = 14'd150; img_h = 14'd100; pix_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_group(60, 0, 0, 0);
    run_group(1, 1, 0, 0);
    run_group(40, 2, 1, 0);   // partly outside the frame
    run_group(80, 1, 1, 1);   // opaque: early exit
    checks++;
    if (n_filtered == 0 || n_skipped == 0 || n_fifo_stall == 0) begin
      failures++; $display("events filtered=%0d skipped=%0d stall=%0d", n_filtered, n_skipped, n_fifo_stall);
    end
    $display("filtered=%0d skipped=%0d fifo_stall=%0d", n_filtered, n_skipped, n_fifo_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
