// tb_gstg_gsm: loads groups of random depths (sizes 0, 1, 2, 17, 300 and a
// full 1344-entry group, plus groups with many equal depths and with
// already-sorted input) into the sorting module and checks that the
// streamed Sorted_G_Idx is the order of a reference sort by (depth, load
// order).  The cycle count of each sort is printed.
module tb_gstg_gsm;
  import gstg_pkg::*;

  localparam int N = 1344, L = 16, LW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, load_valid, start, busy, done, out_valid;
  logic [DEPTH_W-1:0] load_depth;
  logic [LW:0] count, out_addr;
  logic [L-1:0] out_en;
  logic [L-1:0][LW-1:0] out_idx;
  int checks = 0, failures = 0;

  gstg_gsm #(.N(N), .LANES(L)) dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int depth_of [N];
  int got [N];

  task automatic run_group(int n, int mode);
    int ref_idx [$];
    int t0, ng;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < n; i++) begin
      case (mode)
        0: depth_of[i] = int'($urandom_range(0, 65535));
        1: depth_of[i] = int'($urandom_range(0, 3));
        default: depth_of[i] = i * 7;
      endcase
      load_valid = 1; load_depth = DEPTH_W'(depth_of[i]);
      @(negedge clk);
    end
    load_valid = 0;
    checks++;
    if (count != (LW+1)'(n)) begin failures++; $display("count %0d != %0d", count, n); end
    for (int i = 0; i < n; i++) ref_idx.push_back(i);
    ref_idx.sort() with (depth_of[item] * 4096 + item);
    start = 1; t0 = int'($time / 10);
    @(negedge clk); start = 0;
    ng = 0;
    while (!done) begin
      @(negedge clk);
      if (out_valid)
        for (int j = 0; j < L; j++)
          if (out_en[j]) begin got[int'(out_addr) + j] = int'(out_idx[j]); ng++; end
    end
    checks++;
    if (ng != n) begin failures++; $display("got %0d of %0d", ng, n); end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (got[i] != ref_idx[i]) begin
        failures++;
        if (failures < 10) $display("n=%0d pos %0d got %0d exp %0d", n, i, got[i], ref_idx[i]);
      end
    end
    $display("sorted %0d keys (mode %0d) in %0d cycles", n, mode, int'($time / 10) - t0);
  endtask

  initial begin
    clear = 0; load_valid = 0; start = 0; load_depth = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_group(0, 0);
    run_group(1, 0);
    run_group(2, 0);
    run_group(17, 0);
    run_group(300, 0);
    run_group(300, 1);
    run_group(200, 2);
    run_group(N, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
