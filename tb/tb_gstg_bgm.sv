// tb_gstg_bgm: streams random (group, Gaussian) pairs through the bitmask
// generation module.  Each returned bit is checked against a floating-point
// ellipse/tile test (bit 15-(4*row+col) for tile (row, col)), the threshold
// rule is checked against its definition and against the exact bound, and
// the module must take a new Gaussian every 4 cycles with the result 4
// cycles after acceptance.  The output is stalled at random.
module tb_gstg_bgm;
  import gstg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  grp_item_t in_item, out_item;
  logic [NTILES-1:0] out_bmask;
  int checks = 0, failures = 0;

  gstg_bgm dut (.*);


  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 600;
  grp_item_t sent [NG];
  int acc_cyc [NG];
  int nin = 0, nout = 0, stall_mode = 0;

  // driver
  initial begin
    in_valid = 0; in_item = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NG; n++) begin
      pm_in_t p;
      int gx, gy, op;
      gx = $urandom_range(0, 3); gy = $urandom_range(0, 3);
      op = 300 + int'($urandom_range(0, 65000));
      p  = make_gauss(n, gx * 64 + $urandom_range(0, 640) / 10.0 - 4.0,
                      gy * 64 + $urandom_range(0, 640) / 10.0 - 4.0,
                      0.5 + $urandom_range(0, 150) / 10.0, 0.5 + $urandom_range(0, 150) / 10.0,
                      $urandom_range(0, 6283) / 1000.0, op, 0, 0, 0, 100);
      sent[n] = '{gx: GC_W'(gx), gy: GC_W'(gy), g: p.g};
      @(negedge clk);
      in_item  = sent[n];
      in_valid = 1'b1;
      #1;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      acc_cyc[n] = int'($time / 10);
    end
    @(negedge clk);
    in_valid = 1'b0;
  end

  always @(posedge clk) out_ready <= (stall_mode == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);

  // monitor
  initial begin
    int last_acc;
    out_ready = 1;
    @(posedge rst_n);
    while (nout < NG) begin
      @(negedge clk);
      if (out_valid && out_ready) begin
        grp_item_t it;
        real te;
        it = sent[nout];
        checks++;
        if (out_item != it) begin failures++; $display("item mismatch %0d", nout); end
        // first 200 with output always ready: fixed latency and rate
        if (nout < 200) begin
          checks++;
          if (int'(($time - 5) / 10) - acc_cyc[nout] != 4) begin
            failures++; $display("latency %0d at %0d", int'(($time - 5) / 10) - acc_cyc[nout], nout);
          end
          if (nout > 0 && nout < 199) begin
            checks++;
            if (acc_cyc[nout] - acc_cyc[nout - 1] != 4) begin
              failures++; $display("interval %0d", acc_cyc[nout] - acc_cyc[nout - 1]);
            end
          end
        end
        if (nout == 200) stall_mode = 1;
        te = thr_exact(int'(it.g.opac));
        checks++;
        begin
          logic ok; logic [THR_W-1:0] t;
          t = opac_thr(it.g.opac, ok);
          if (longint'(t) != thr_fixed(int'(it.g.opac)) || $itor(t) / 65536.0 < te) begin
            failures++; $display("threshold %0d %0d %f", t, thr_fixed(int'(it.g.opac)), te);
          end
        end
        for (int row = 0; row < 4; row++)
          for (int col = 0; col < 4; col++) begin
            real qm;
            logic bit_v;
            qm = qmin_rect(it.g, int'(it.gx) * 64 + col * 16, int'(it.gy) * 64 + row * 16, 16);
            bit_v = out_bmask[15 - (row * 4 + col)];
            checks++;
            if (qm <= te - 1e-3 && !bit_v) begin failures++; $display("missing bit"); end
            if (qm > te + 0.2 && bit_v) begin failures++; $display("extra bit"); end
          end
        nout++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
