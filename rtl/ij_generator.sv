// ij_generator: produces the coordinate (i, j) of the pixel whose
// orientation the pipeline computes next.
//
// A start pulse sets it to (0, 0) and marks it running; every advance pulse
// (one per pipeline clock period) moves it to the next pixel until the whole
// image of 2^COORD_W x 2^COORD_W pixels has been issued, then it stops.
// Pixels are issued block by block, since the direction counters gather one
// 16 x 16 block at a time: blocks in raster order, and within a block rows
// top to bottom with j counting fastest. Internally this is a single counter
// {block_row, block_col, row_in_block, col_in_block}; i = {block_row,
// row_in_block}, j = {block_col, col_in_block}. The scan order is this
// design's choice (the published waveform only shows j stepping 08, 09, 0A
// with i fixed). A start while running is ignored.
module ij_generator
  import orient_pkg::*;
#(
  parameter int COORD_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               adv,
  output logic [COORD_W-1:0] i,
  output logic [COORD_W-1:0] j,
  output logic               valid   // (i, j) is a pixel still to process
);
  localparam int BW = COORD_W - BLK_BITS;   // block coordinate bits

  logic [2*COORD_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      valid <= 1'b0;
    end else if (start && !valid) begin
      cnt   <= '0;
      valid <= 1'b1;
    end else if (adv && valid) begin
      cnt <= cnt + 1'b1;
      if (&cnt) valid <= 1'b0;
    end
  end

  // cnt = {bi, bj, pi, pj}
  assign i = {cnt[2*COORD_W-1 -: BW], cnt[2*BLK_BITS-1 -: BLK_BITS]};
  assign j = {cnt[2*COORD_W-BW-1 -: BW], cnt[BLK_BITS-1:0]};
endmodule
