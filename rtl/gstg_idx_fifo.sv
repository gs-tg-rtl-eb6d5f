// gstg_idx_fifo: the first-in-first-out buffer between the tile filter and
// the tile-wise rasterization module.  It keeps the Gaussian indices that
// reach the current tile in front-to-back order.  Up to WR (8) entries are
// written per cycle: the lanes flagged in wr_lane are packed in lane order
// (lane 0 first), so a sparse 8-bit valid vector enters as a dense run and
// the sorted order is kept.  One entry is read per cycle.
// wr_ready is high while at least WR entries are free, so a write is never
// partly accepted.  Depth (32) and the write packing are this design's
// choices; the paper only names the FIFO and its purpose.
module gstg_idx_fifo #(
  parameter int W     = 12,
  parameter int WR    = 8,
  parameter int DEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  logic [WR-1:0]        wr_lane,
  input  logic [WR-1:0][W-1:0] wr_data,
  output logic                 wr_ready,
  output logic                 rd_valid,
  input  logic                 rd_ready,
  output logic [W-1:0]         rd_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   nwr;
  logic          rd;

  always_comb begin
    nwr = '0;
    for (int j = 0; j < WR; j++) nwr = nwr + (AW+1)'(wr_lane[j]);
  end

  assign wr_ready = (level <= (AW+1)'(DEPTH - WR));
  assign rd_valid = (level != 0);
  assign rd_data  = mem[rp];
  assign rd       = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      logic [AW-1:0] a;
      logic [AW:0]   nw;
      assert (!(|wr_lane && !wr_ready)) else $error("FIFO written while not ready");
      a  = wp;
      nw = '0;
      if (wr_ready) begin
        for (int j = 0; j < WR; j++) begin
          if (wr_lane[j]) begin
            mem[a] <= wr_data[j];
            a = a + 1'b1;
          end
        end
        nw = nwr;
      end
      wp    <= a;
      if (rd) rp <= rp + 1'b1;
      level <= level + nw - (AW+1)'(rd);
    end
  end
endmodule
