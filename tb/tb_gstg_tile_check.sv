// tb_gstg_tile_check: random Gaussians against random 16x16 and 64x64
// squares.  The expected answer is the minimum of the quadratic form over
// the square, found in floating point, compared with the exact opacity
// threshold; cases within a small margin of the boundary are only required
// to be conservative (a hit is allowed, a miss is not).
module tb_gstg_tile_check;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  gauss_t                  g16, g64;
  logic [THR_W-1:0]        thr;
  logic signed [PIX_W+1:0] x0, y0;
  logic                    hit16, hit64;
  int checks = 0, failures = 0, nhit = 0, nmiss = 0;

  gstg_tile_check #(.SIZE(16)) dut16 (.g(g16), .thr, .x0, .y0, .hit(hit16));
  gstg_tile_check #(.SIZE(64)) dut64 (.g(g64), .thr, .x0, .y0, .hit(hit64));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pm_in_t p;
    real qm, te;
    int op;
    logic ok;
    for (int n = 0; n < 4000; n++) begin
      op = 300 + int'($urandom_range(0, 65000));
      p  = make_gauss(n, $urandom_range(0, 2000) / 10.0, $urandom_range(0, 2000) / 10.0,
                      0.5 + $urandom_range(0, 300) / 10.0, 0.5 + $urandom_range(0, 300) / 10.0,
                      $urandom_range(0, 6283) / 1000.0, op, 0, 0, 0, 100);
      g16 = p.g; g64 = p.g;
      thr = opac_thr(16'(op), ok);
      x0  = (PIX_W+2)'($urandom_range(0, 12) * 16);
      y0  = (PIX_W+2)'($urandom_range(0, 12) * 16);
      te  = thr_exact(op);
      #1;
      // size 16
      qm = qmin_rect(p.g, int'(x0), int'(y0), 16);
      checks++;
      if (qm <= te - 1e-3) begin
        if (!hit16) begin failures++; $display("miss16 n=%0d qm=%f te=%f", n, qm, te); end
      end else if (qm > te + 0.2) begin
        if (hit16) begin failures++; $display("false16 n=%0d qm=%f te=%f", n, qm, te); end
      end
      if (hit16) nhit++; else nmiss++;
      // size 64
      qm = qmin_rect(p.g, int'(x0), int'(y0), 64);
      checks++;
      if (qm <= te - 1e-3) begin
        if (!hit64) begin failures++; $display("miss64 n=%0d qm=%f te=%f", n, qm, te); end
      end else if (qm > te + 0.2) begin
        if (hit64) begin failures++; $display("false64 n=%0d qm=%f te=%f", n, qm, te); end
      end
      // a tile inside the group can only be hit if the group is hit
      checks++;
      if (hit16 && !hit64) failures++;
    end
    checks++;
    if (nhit < 100 || nmiss < 100) begin failures++; $display("poor coverage %0d %0d", nhit, nmiss); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
