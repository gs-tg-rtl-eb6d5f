// tb_gstg_idx_fifo: random sparse 8-lane writes and random reads; the read
// order must equal the write order with lanes taken lowest first, wr_ready
// must be high exactly while 8 entries are free, and the FIFO must fill up
// (back-pressure) and empty during the run.
module tb_gstg_idx_fifo;
  localparam int W = 12, WR = 8, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush = 0;
  logic [WR-1:0] wr_lane;
  logic [WR-1:0][W-1:0] wr_data;
  logic wr_ready, rd_valid, rd_ready;
  logic [W-1:0] rd_data;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0, nfull = 0, nempty = 0, val = 0;
  int q [$];

  gstg_idx_fifo #(.W(W), .WR(WR), .DEPTH(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_lane = '0; wr_data = '0; rd_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      // check the state seen before this edge's inputs
      checks++;
      if (int'(level) != q.size() || rd_valid != (q.size() != 0) || wr_ready != (q.size() <= D - WR)) begin
        failures++; $display("state level=%0d model=%0d", level, q.size());
      end
      if (rd_valid) begin
        checks++;
        if (int'(rd_data) != q[0]) begin failures++; $display("data %0d exp %0d", rd_data, q[0]); end
      end
      if (!wr_ready) nfull++;
      if (!rd_valid) nempty++;
      // next inputs (phase changes the balance of reads and writes)
      rd_ready = ((c / 2000) % 2 == 0) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      wr_lane  = wr_ready ? WR'($urandom) : '0;
      if ((c / 2000) % 2 == 1) wr_lane = wr_lane & WR'($urandom);
      for (int j = 0; j < WR; j++) begin
        wr_data[j] = W'(val + j);
      end
      // model: the read happens first in the same edge, writes append
      if (rd_valid && rd_ready) void'(q.pop_front());
      for (int j = 0; j < WR; j++) if (wr_lane[j]) q.push_back(val + j);
      val = (val + WR) % 4000;
    end
    checks++;
    if (nfull == 0 || nempty == 0) begin failures++; $display("no full/empty seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
