// tb_gstg_tile_filter: random bitmasks against every one-hot tile location;
// a lane is valid when it is enabled and its mask has the tile's bit set.
// Includes the bitmasks printed in the pipeline figure.
module tb_gstg_tile_filter;
  import gstg_pkg::*;
  logic [7:0][NTILES-1:0] bmask;
  logic [NTILES-1:0] tile_loc;
  logic [7:0] lane_en, valid;
  int checks = 0, failures = 0;

  gstg_tile_filter #(.RD(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Gaussians 0..2 of the figure, tile (row 2, col 3) = bit 15-11 = 4
    bmask = '0;
    bmask[0] = 16'b1111111100110000;
    bmask[1] = 16'b0100111011101110;
    bmask[2] = 16'b0000000000010011;
    lane_en = 8'b0000_0111;
    tile_loc = 16'h1 << (15 - 11);
    #1;
    checks++;
    if (valid != 8'b0000_0101) begin failures++; $display("figure case %b", valid); end
    tile_loc = 16'h1 << 15;   // tile (0,0)
    #1;
    checks++;
    if (valid != 8'b0000_0001) begin failures++; $display("figure case 2 %b", valid); end
    for (int n = 0; n < 2000; n++) begin
      int t;
      for (int j = 0; j < 8; j++) bmask[j] = NTILES'($urandom);
      lane_en  = 8'($urandom);
      t        = $urandom_range(0, 15);
      tile_loc = NTILES'(1) << (15 - t);
      #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (valid[j] != (lane_en[j] && bmask[j][15 - t])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
