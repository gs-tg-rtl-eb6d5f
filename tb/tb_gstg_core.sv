// tb_gstg_core: whole groups through one GS-TG core (bitmask generation,
// sorting, double-buffered group memory, rasterization).  Every pixel is
// compared with a reference that blends ALL of the group's Gaussians in
// depth order without any bitmask, so the test also shows that the bitmask
// filtering loses nothing.  Groups: random ones sent back to back (so that
// filling overlaps rasterization), a dense opaque one (early exit) and one
// longer than the group memory (records past the 1344th are dropped, and
// the reference drops them too).
module tb_gstg_core;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 1344;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PIX_W-1:0] img_w, img_h;
  logic in_valid, in_ready, in_last, pix_valid, pix_ready, idle;
  grp_item_t in_item;
  pixel_t pix;
  logic [31:0] n_groups, n_overflow, n_filtered, n_skipped, n_fifo_stall, n_overlap;
  int checks = 0, failures = 0;

  gstg_core dut (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int gx, gy, n; } grp_t;
  grp_t      groups [$];
  pm_in_t    items [$];      // all items, in send order
  int        first [$];      // index of each group's first item

  int got_r [256][256], got_g [256][256], got_b [256][256];
  bit got [256][256];
  int nwritten = 0;

  always @(posedge clk) pix_ready <= ($urandom_range(0, 7) != 0);
  always @(negedge clk) if (pix_valid && pix_ready) begin
    if (got[pix.y][pix.x]) begin failures++; $display("pixel written twice"); end
    got[pix.y][pix.x] = 1;
    got_r[pix.y][pix.x] = int'(pix.r); got_g[pix.y][pix.x] = int'(pix.g); got_b[pix.y][pix.x] = int'(pix.b);
    nwritten++;
  end

  task automatic add_group(int gx, int gy, int n, int kind);
    first.push_back(items.size());
    groups.push_back('{gx: gx, gy: gy, n: n});
    for (int i = 0; i < n; i++) begin
      pm_in_t p;
      real s;
      s = (kind == 2) ? 0.5 + $urandom_range(0, 10) / 10.0 : 0.5 + $urandom_range(0, 100) / 10.0;
      p = make_gauss(items.size(), gx * 64 + $urandom_range(0, 640) / 10.0, gy * 64 + $urandom_range(0, 640) / 10.0,
                     (kind == 1) ? 30.0 : s, (kind == 1) ? 30.0 : s + $urandom_range(0, 20) / 10.0,
                     $urandom_range(0, 6283) / 1000.0,
                     (kind == 1) ? 64000 : int'($urandom_range(300, 65000)),
                     int'($urandom_range(0, 65535)), int'($urandom_range(0, 65535)),
                     int'($urandom_range(0, 65535)), 16'h3400 + items.size() * 3 + int'($urandom_range(0, 2)));
      items.push_back(p);
    end
  endtask

  initial begin
    int exp_n;
    img_w = 14'd200; img_h = 14'd192;
    in_valid = 0; in_last = 0; in_item = '0;
    for (int y = 0; y < 256; y++) for (int x = 0; x < 256; x++) got[y][x] = 0;
    add_group(0, 0, 50, 0);
    add_group(1, 0, 70, 0);
    add_group(2, 0, 30, 0);
    add_group(0, 1, 120, 1);     // opaque
    add_group(1, 1, N + 60, 2);  // overflow
    add_group(2, 2, 40, 0);      // partly outside the frame
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int gi = 0; gi < groups.size(); gi++) begin
      for (int i = 0; i < groups[gi].n; i++) begin
        @(negedge clk);
        in_item = '{gx: GC_W'(groups[gi].gx), gy: GC_W'(groups[gi].gy), g: items[first[gi] + i].g};
        in_last = (i == groups[gi].n - 1);
        in_valid = 1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
    end
    #1;
    while (!idle) begin @(negedge clk); #1; end
    repeat (400) @(negedge clk);
    // reference: every Gaussian of the group (first N kept), sorted by depth, no bitmask
    exp_n = 0;
    for (int gi = 0; gi < groups.size(); gi++) begin
      int ord [$];
      int kept;
      kept = (groups[gi].n > N) ? N : groups[gi].n;
      ord.delete();
      for (int i = 0; i < kept; i++) ord.push_back(first[gi] + i);
      ord.sort() with (int'(items[item].g.depth));
      for (int y = groups[gi].gy * 64; y < groups[gi].gy * 64 + 64; y++)
        for (int x = groups[gi].gx * 64; x < groups[gi].gx * 64 + 64; x++) begin
          px_state_t s;
          if (x >= int'(img_w) || y >= int'(img_h)) begin
            checks++;
            if (got[y][x]) failures++;
            continue;
          end
          s = px_init();
          foreach (ord[k]) begin
            pm_in_t p;
            p = items[ord[k]];
            if ($itor(x) < rx(p.g) - p.radius || $itor(x) > rx(p.g) + p.radius ||
                $itor(y) < ry(p.g) - p.radius || $itor(y) > ry(p.g) + p.radius) continue;
            s = px_blend(s, p.g, x, y);
          end
          checks++;
          exp_n++;
          if (!got[y][x] || got_r[y][x] != sat16(s.r) || got_g[y][x] != sat16(s.g) || got_b[y][x] != sat16(s.b)) begin
            failures++;
            if (failures < 10) $display("pixel %0d,%0d got %0d exp %0d (written %0d)", x, y, got_r[y][x], sat16(s.r), got[y][x]);
          end
        end
    end
    $display("groups=%0d overflow=%0d filtered=%0d skipped=%0d fifo_stall=%0d overlap=%0d written=%0d/%0d",
             n_groups, n_overflow, n_filtered, n_skipped, n_fifo_stall, n_overlap, nwritten, exp_n);
    checks++;
    if (int'(n_groups) != groups.size() || int'(n_overflow) != 60) failures++;
    checks++;
    if (n_filtered == 0 || n_skipped == 0 || n_fifo_stall == 0 || n_overlap == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
