// tb_gstg_group_mem: fills both banks with different random records, masks
// and sorted lists (the sorted list 16 entries per write), then reads them
// back through the rasterization-side ports, with the read bank chosen
// independently of the write bank.
module tb_gstg_group_mem;
  import gstg_pkg::*;
  localparam int N = 1344, LW = $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wsel, wr_en, sw_valid, rsel;
  logic [LW-1:0] wr_addr, feat_addr;
  gauss_t wr_feat, feat;
  logic [NTILES-1:0] wr_bmask;
  logic [LW:0] sw_addr, rd_pos;
  logic [15:0] sw_en;
  logic [15:0][LW-1:0] sw_idx;
  logic [7:0][LW-1:0] rd_sidx;
  logic [7:0][NTILES-1:0] rd_bmask;
  int checks = 0, failures = 0;

  gstg_group_mem #(.N(N)) dut (.*);

  gauss_t            mf [2][N];
  logic [NTILES-1:0] mb [2][N];
  int                ms [2][N];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; sw_valid = 0; wsel = 0; rsel = 0; rd_pos = '0; feat_addr = '0;
    wr_addr = '0; wr_feat = '0; wr_bmask = '0; sw_addr = '0; sw_en = '0; sw_idx = '0;
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wsel = 1'(b); wr_en = 1; wr_addr = LW'(i);
        wr_feat = {8{$urandom}}; wr_bmask = NTILES'($urandom);
        mf[b][i] = wr_feat; mb[b][i] = wr_bmask;
      end
      @(negedge clk); wr_en = 0;
      for (int i = 0; i < N; i += 16) begin
        @(negedge clk);
        sw_valid = 1; sw_addr = (LW+1)'(i);
        for (int j = 0; j < 16; j++) begin
          sw_en[j]  = (i + j < N);
          sw_idx[j] = LW'($urandom_range(0, N - 1));
          if (i + j < N) ms[b][i + j] = int'(sw_idx[j]);
        end
      end
      @(negedge clk); sw_valid = 0;
    end
    for (int n = 0; n < 3000; n++) begin
      int b, p, f;
      b = $urandom_range(0, 1); p = $urandom_range(0, N - 8); f = $urandom_range(0, N - 1);
      rsel = 1'(b); rd_pos = (LW+1)'(p); feat_addr = LW'(f);
      wsel = ~rsel;
      #1;
      checks++;
      if (feat != mf[b][f]) failures++;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (int'(rd_sidx[j]) != ms[b][p + j] || rd_bmask[j] != mb[b][ms[b][p + j]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
