// gstg_bgm: bitmask generation module (BGM).
//
// For each (group, Gaussian) pair entering a GS-TG core it produces the
// 16-bit Tile_Bitmask that marks which 16x16 tiles of the 64x64 group the
// Gaussian reaches.  Four tile check units work in parallel, one per tile
// column, and the module walks the four tile rows in four cycles, so a new
// Gaussian can be accepted every 4 cycles.  The opacity-aware ellipse
// threshold is computed from sigma once per Gaussian, on acceptance.
//
// Bit order (from the printed bitmasks of the pipeline figure): bit 15 is
// tile (row 0, col 0) of the group, bit 15-(4*row+col) is tile (row, col).
// The four tile check units and the 16-bit mask follow the paper; the
// row-per-cycle schedule and the valid/ready handshakes are this design's.
//
// Interface: in_valid/in_ready takes a grp_item_t; out_valid/out_ready gives
// the same item with out_bmask.  Latency: out_valid rises 4 cycles after
// the accepting edge; throughput one item per 4 cycles.
module gstg_bgm
  import gstg_pkg::*;
#(
  parameter int NTCU = GROUP_TILES   // tile check units (one tile row per cycle)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  grp_item_t            in_item,
  output logic                 out_valid,
  input  logic                 out_ready,
  output grp_item_t            out_item,
  output logic [NTILES-1:0]    out_bmask
);

  grp_item_t              cur;
  logic [THR_W-1:0]       cur_thr;
  logic                   cur_ok;
  logic                   busy;
  logic [1:0]             row;
  logic [NTILES-1:0]      mask;
  logic [NTCU-1:0]        hit;
  logic                   accept, last_row, step;

  for (genvar j = 0; j < NTCU; j++) begin : g_tcu
    logic signed [PIX_W+1:0] x0, y0;
    assign x0 = (PIX_W+2)'({cur.gx, 6'b0}) + (PIX_W+2)'(j * TILE);
    assign y0 = (PIX_W+2)'({cur.gy, 6'b0}) + (PIX_W+2)'({row, 4'b0});
    gstg_tile_check #(.SIZE(TILE)) u_tcu (
      .g(cur.g), .thr(cur_thr), .x0(x0), .y0(y0), .hit(hit[j])
    );
  end

  // Bits of the current row, placed at 15-(4*row+col).
  function automatic logic [NTILES-1:0] row_bits(input logic [1:0] r, input logic [NTCU-1:0] h);
    logic [NTILES-1:0] m;
    m = '0;
    for (int j = 0; j < NTCU; j++) m[NTILES-1 - (int'(r) * GROUP_TILES + j)] = h[j] & cur_ok;
    return m;
  endfunction

  assign last_row = busy && (row == 2'(GROUP_TILES - 1));
  // A row is checked unless the last row has to wait for the output register.
  assign step     = busy && !(last_row && out_valid && !out_ready);
  assign in_ready = (!busy || last_row) && (!out_valid || out_ready);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; row <= '0; mask <= '0; out_valid <= 1'b0;
      cur <= '0; cur_thr <= '0; cur_ok <= 1'b0; out_item <= '0; out_bmask <= '0;
    end else begin
      // The output register is only overwritten once it has been taken.
      assert (!(out_valid && !out_ready && step && last_row)) else $error("BGM output overwritten");
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (step) begin
        mask <= mask | row_bits(row, hit);
        row  <= row + 2'd1;
        if (last_row) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          out_item  <= cur;
          out_bmask <= mask | row_bits(row, hit);
        end
      end
      if (accept) begin
        logic ok;
        cur     <= in_item;
        cur_thr <= opac_thr(in_item.g.opac, ok);
        cur_ok  <= ok;
        busy    <= 1'b1;
        row     <= '0;
        mask    <= '0;
      end
    end
  end

endmodule
