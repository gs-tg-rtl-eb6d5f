// gstg_group_mem: group shared memory of one GS-TG core.
//
// Holds, for one tile group, the Gaussian features (sigma, 2D_XY, 2D_Cov,
// G_RGB, plus global index and depth), the 16-bit Tile_Bitmask of each
// Gaussian and the Sorted_G_Idx list.  It has two banks: while the
// rasterization module reads one group from bank rsel, the bitmask and
// sorting modules fill the next group into bank wsel.  Each bank is N
// records of 256 bits (236 feature bits + 16 mask bits, padded to 32 bytes),
// so N = 1344 gives 42 KB per bank and 2 x 42 KB per core, the buffer size
// of the hardware configuration table.  Using that buffer as the double-
// buffered group store, the record layout and N are this design's reading.
//
// Ports: one record write port (feature + mask), one LANES-wide write port
// for the sorted index list, and on the read side RD consecutive sorted
// indices with their bitmasks (for the tile filter) and one feature read
// (for the rasterizer).  Reads are combinational (register-file style).
module gstg_group_mem
  import gstg_pkg::*;
#(
  parameter int N      = 1344,
  parameter int LANES  = 16,
  parameter int RD     = 8,
  parameter int LIDX_W = $clog2(N)
) (
  input  logic                           clk,
  // fill side
  input  logic                           wsel,
  input  logic                           wr_en,
  input  logic [LIDX_W-1:0]              wr_addr,
  input  gauss_t                         wr_feat,
  input  logic [NTILES-1:0]              wr_bmask,
  input  logic                           sw_valid,
  input  logic [LIDX_W:0]                sw_addr,
  input  logic [LANES-1:0]               sw_en,
  input  logic [LANES-1:0][LIDX_W-1:0]   sw_idx,
  // rasterization side
  input  logic                           rsel,
  input  logic [LIDX_W:0]                rd_pos,
  output logic [RD-1:0][LIDX_W-1:0]      rd_sidx,
  output logic [RD-1:0][NTILES-1:0]      rd_bmask,
  input  logic [LIDX_W-1:0]              feat_addr,
  output gauss_t                         feat
);

  gauss_t            feat_m  [2][N];
  logic [NTILES-1:0] bmask_m [2][N];
  logic [LIDX_W-1:0] sidx_m  [2][N];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      feat_m[wsel][wr_addr]  <= wr_feat;
      bmask_m[wsel][wr_addr] <= wr_bmask;
    end
    if (sw_valid)
      for (int j = 0; j < LANES; j++)
        if (sw_en[j]) sidx_m[wsel][LIDX_W'(sw_addr + (LIDX_W+1)'(j))] <= sw_idx[j];
  end

  always_comb begin
    for (int j = 0; j < RD; j++) begin
      logic [LIDX_W:0] pos;
      pos         = rd_pos + (LIDX_W+1)'(j);
      rd_sidx[j]  = (pos < (LIDX_W+1)'(N)) ? sidx_m[rsel][LIDX_W'(pos)] : '0;
      rd_bmask[j] = bmask_m[rsel][rd_sidx[j]];
    end
    feat = feat_m[rsel][feat_addr];
  end

endmodule
