// tb_gstg_tile_raster: renders several 16x16 tiles through the 16 RUs and
// the memory controller.  Each tile gets a random list of Gaussians; the
// 256 written pixels are compared with the fixed-point reference, pixels
// outside a 100x90 frame must not be written, one tile is covered by opaque
// Gaussians to trigger all_done, and the output is stalled at random.
module tb_gstg_tile_raster;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PIX_W-1:0] tile_x0, tile_y0, img_w, img_h;
  logic g_valid, g_ready, all_done, end_valid, end_ready, pix_valid, pix_ready;
  gauss_t g;
  pixel_t pix;
  int checks = 0, failures = 0, n_done = 0;

  gstg_tile_raster dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  px_state_t st [16][16];
  bit        written [16][16];
  int        nwritten;

  always @(posedge clk) pix_ready <= ($urandom_range(0, 3) != 0);

  // collect pixels of the tile being written out
  int cx0, cy0;
  always @(negedge clk) if (pix_valid && pix_ready) begin
    int lx, ly;
    lx = int'(pix.x) - cx0; ly = int'(pix.y) - cy0;
    checks++;
    if (lx < 0 || lx > 15 || ly < 0 || ly > 15 || pix.x >= img_w || pix.y >= img_h || written[ly][lx]) begin
      failures++; $display("bad pixel %0d %0d", pix.x, pix.y);
    end else begin
      written[ly][lx] = 1; nwritten++;
      if (int'(pix.r) != sat16(st[ly][lx].r) || int'(pix.g) != sat16(st[ly][lx].g) ||
          int'(pix.b) != sat16(st[ly][lx].b)) begin
        failures++;
        if (failures < 10) $display("pixel %0d,%0d got %0d exp %0d", pix.x, pix.y, pix.r, st[ly][lx].r);
      end
    end
  end

  initial begin
    img_w = 14'd100; img_h = 14'd90;
    g_valid = 0; end_valid = 0; g = '0; tile_x0 = '0; tile_y0 = '0; pix_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int ng, exp_n;
      bit opaque;
      opaque  = (t == 2);
      @(negedge clk);
      tile_x0 = PIX_W'((t % 3) * 48); tile_y0 = PIX_W'((t / 3) * 80);
      for (int r = 0; r < 16; r++) for (int k = 0; k < 16; k++) st[r][k] = px_init();
      ng = opaque ? 30 : 10;
      for (int n = 0; n < ng; n++) begin
        pm_in_t p;
        p = make_gauss(n, tile_x0 + $urandom_range(0, 200) / 10.0 - 2.0, tile_y0 + $urandom_range(0, 200) / 10.0 - 2.0,
                       opaque ? 20.0 : 0.5 + $urandom_range(0, 80) / 10.0,
                       opaque ? 20.0 : 0.5 + $urandom_range(0, 80) / 10.0,
                       $urandom_range(0, 6283) / 1000.0,
                       opaque ? 65000 : int'($urandom_range(300, 65000)),
                       int'($urandom_range(0, 65535)), int'($urandom_range(0, 65535)),
                       int'($urandom_range(0, 65535)), n);
        g = p.g; g_valid = 1;
        #1;
        while (!g_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        g_valid = 0;
        for (int r = 0; r < 16; r++) for (int k = 0; k < 16; k++)
          st[r][k] = px_blend(st[r][k], p.g, int'(tile_x0) + k, int'(tile_y0) + r);
      end
      cx0 = int'(tile_x0); cy0 = int'(tile_y0);
      nwritten = 0;
      for (int r = 0; r < 16; r++) for (int k = 0; k < 16; k++) written[r][k] = 0;
      // the previous tile has been written out; end this one
      end_valid = 1;
      #1;
      while (!end_ready) begin @(negedge clk); #1; end
      if (all_done) n_done++;
      @(negedge clk);
      end_valid = 0;
      exp_n = 0;
      for (int r = 0; r < 16; r++) for (int k = 0; k < 16; k++)
        if (int'(tile_x0) + k < 100 && int'(tile_y0) + r < 90) exp_n++;
      while (nwritten < exp_n) @(negedge clk);
      repeat (300) @(negedge clk);
      checks++;
      if (nwritten != exp_n) begin failures++; $display("wrote %0d of %0d", nwritten, exp_n); end
    end
    checks++;
    if (n_done == 0) begin failures++; $display("all_done never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
