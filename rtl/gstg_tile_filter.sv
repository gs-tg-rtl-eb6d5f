// gstg_tile_filter: the bitmask filter at the front of the rasterization
// module.  RD (8) lanes each AND a Gaussian's 16-bit Tile_Bitmask with the
// 16-bit one-hot Tile_Location of the tile being rasterized, and OR-reduce
// the 16 result bits into that lane's valid flag, giving the 8-bit valid
// vector that tells which of eight sorted Gaussians reach the tile.  This is
// the structure drawn in the paper (bitwise AND, 16-bit OR, 8 lanes); lanes
// beyond the end of the group's list are masked by lane_en.
// Purely combinational.
module gstg_tile_filter
  import gstg_pkg::*;
#(
  parameter int RD = 8
) (
  input  logic [RD-1:0][NTILES-1:0] bmask,
  input  logic [NTILES-1:0]         tile_loc,
  input  logic [RD-1:0]             lane_en,
  output logic [RD-1:0]             valid
);
  for (genvar j = 0; j < RD; j++) begin : g_lane
    assign valid[j] = lane_en[j] & (|(bmask[j] & tile_loc));
  end
endmodule
