// tb_gstg_ru: feeds sequences of random Gaussians to one rasterization unit
// (a 16-pixel row) and compares every pixel's colour with the fixed-point
// reference of equations (1) and (2), and with floating-point blending
// within a tolerance.  Checks the 16-cycle occupancy per Gaussian, that
// early exit happens (dense opaque Gaussians) and that all_done follows it.
module tb_gstg_ru;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, g_valid, g_ready, all_done, idle;
  logic [PIX_W-1:0] x0, y;
  gauss_t g;
  logic [15:0][COL_W-1:0] col_r, col_g, col_b;
  int checks = 0, failures = 0, n_exit = 0;

  gstg_ru dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; g_valid = 0; g = '0; x0 = 14'd32; y = 14'd40;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 60; seq++) begin
      px_state_t st [16];
      real fr [16], ft [16];
      int ng, t_first, t_last;
      bit dense;
      dense = (seq % 3 == 2);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < 16; k++) begin st[k] = px_init(); fr[k] = 0.0; ft[k] = 1.0; end
      ng = dense ? 40 : 12;
      for (int n = 0; n < ng; n++) begin
        pm_in_t p;
        p = make_gauss(n, 32 + $urandom_range(0, 160) / 10.0, 40 + $urandom_range(0, 80) / 10.0 - 4.0,
                       dense ? 6.0 + $urandom_range(0, 60) / 10.0 : 0.5 + $urandom_range(0, 80) / 10.0,
                       dense ? 6.0 + $urandom_range(0, 60) / 10.0 : 0.5 + $urandom_range(0, 80) / 10.0,
                       $urandom_range(0, 6283) / 1000.0,
                       dense ? 60000 + int'($urandom_range(0, 5000)) : int'($urandom_range(300, 65000)),
                       int'($urandom_range(0, 65535)), int'($urandom_range(0, 65535)),
                       int'($urandom_range(0, 65535)), n);
        g = p.g; g_valid = 1;
        #1;
        while (!g_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        if (n == 0) t_first = int'($time / 10);
        t_last = int'($time / 10);
        @(negedge clk);
        g_valid = 0;
        for (int k = 0; k < 16; k++) begin
          st[k] = px_blend(st[k], p.g, 32 + k, 40);
          begin
            real a;
            a = p.g.opac / 65536.0 * $exp(-0.5 * qf(ra(p.g), rb(p.g), rc(p.g),
                                                     32 + k - rx(p.g), 40 - ry(p.g)));
            if (a > 0.99) a = 0.99;
            if (a >= 1.0 / 255.0 && ft[k] >= 1e-4) begin
              fr[k] = fr[k] + p.g.r / 65536.0 * a * ft[k];
              ft[k] = ft[k] * (1.0 - a);
            end
          end
        end
      end
      // back-to-back issue: one Gaussian per 16 cycles
      checks++;
      if (t_last - t_first != 16 * (ng - 1)) begin
        failures++; $display("issue spacing %0d for %0d", t_last - t_first, ng);
      end
      while (!idle) @(negedge clk);
      begin
        bit all_exit;
        all_exit = 1;
        for (int k = 0; k < 16; k++) begin
          checks++;
          if (int'(col_r[k]) != sat16(st[k].r) || int'(col_g[k]) != sat16(st[k].g) ||
              int'(col_b[k]) != sat16(st[k].b)) begin
            failures++; $display("seq %0d px %0d got %0d exp %0d", seq, k, col_r[k], st[k].r);
          end
          checks++;
          if (col_r[k] / 65536.0 - fr[k] > 0.02 || fr[k] - col_r[k] / 65536.0 > 0.02) begin
            failures++; $display("seq %0d px %0d fixed %f float %f", seq, k, col_r[k] / 65536.0, fr[k]);
          end
          if (st[k].t >= 7) all_exit = 0;
        end
        checks++;
        if (all_done != all_exit) failures++;
        if (all_exit) n_exit++;
      end
    end
    checks++;
    if (n_exit == 0) begin failures++; $display("early exit never happened"); end
    $display("early exit in %0d sequences", n_exit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
