// tb_gstg_pm: random Gaussians, some to be culled (opacity below 1/255,
// depth at or before the near plane, entirely outside the 300x200 frame),
// through the preprocessing module.  For every kept Gaussian the emitted
// groups are compared with a floating-point ellipse/group test over all
// groups of the frame (groups near the boundary may go either way), each
// item must carry the Gaussian unchanged, and the culled count must match.
// The output is stalled at random.
module tb_gstg_pm;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PIX_W-1:0] img_w, img_h;
  logic in_valid, in_ready, out_valid, out_ready, idle;
  pm_in_t in;
  grp_item_t out;
  logic [31:0] n_culled, n_pairs;
  int checks = 0, failures = 0;

  gstg_pm dut (.*);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  bit got [8][8];
  int ngot;
  gauss_t cur_g;
  always @(negedge clk) if (out_valid && out_ready) begin
    checks++;
    if (out.g != cur_g || out.gx > 4 || out.gy > 3) begin failures++; $display("bad item"); end
    else begin
      if (got[out.gy][out.gx]) failures++;
      got[out.gy][out.gx] = 1;
    end
    ngot++;
  end

  initial begin
    int exp_cull;
    exp_cull = 0;
    img_w = 14'd300; img_h = 14'd200;   // 5 x 4 groups
    in_valid = 0; in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      pm_in_t p;
      int kind, op, dep;
      real cx, cy;
      kind = $urandom_range(0, 9);
      op   = (kind == 0) ? int'($urandom_range(1, 256)) : int'($urandom_range(300, 65000));
      dep  = (kind == 1) ? int'($urandom_range(0, 16'h3266)) : int'($urandom_range(16'h3267, 16'h7000));
      cx   = (kind == 2) ? -200.0 : $urandom_range(0, 3400) / 10.0 - 20.0;
      cy   = $urandom_range(0, 2400) / 10.0 - 20.0;
      p = make_gauss(n, cx, cy, 0.5 + $urandom_range(0, 300) / 10.0, 0.5 + $urandom_range(0, 300) / 10.0,
                     $urandom_range(0, 6283) / 1000.0, op, 1, 2, 3, dep);
      if (kind <= 2) exp_cull++;
      for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) got[y][x] = 0;
      ngot = 0;
      cur_g = p.g;
      in = p; in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 0;
      #1;
      while (!idle) begin @(negedge clk); #1; end
      @(negedge clk);
      for (int y = 0; y < 4; y++) for (int x = 0; x < 5; x++) begin
        real qm, te;
        te = thr_exact(op);
        qm = qmin_rect(p.g, x * 64, y * 64, 64);
        checks++;
        if (kind <= 2) begin
          if (got[y][x]) begin failures++; $display("culled Gaussian %0d emitted", n); end
        end else if (qm <= te - 1e-3 && !got[y][x]) begin
          failures++; $display("group %0d,%0d missed for %0d kind %0d", x, y, n, kind);
        end else if (qm > te + 0.2 && got[y][x]) begin
          failures++; $display("group %0d,%0d extra for %0d", x, y, n);
        end
      end
    end
    checks++;
    if (int'(n_culled) != exp_cull) begin failures++; $display("culled %0d exp %0d", n_culled, exp_cull); end
    $display("culled=%0d pairs=%0d", n_culled, n_pairs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
