// stage3: pipeline stage 3, the direction counters, the Maximum circuit and
// the block bookkeeping that writes each block orientation to the
// orientation RAM.
//
// Sixteen 8-bit counters count how often each direction won in the current
// 16 x 16 block; the 9-bit pixel counter counts the pixels taken in. When its
// bit 8 is set (256 pixels), the Maximum circuit's output, the index of the
// largest counter, is written to the orientation RAM at the address held by
// the 8-bit block address counter, the address counter advances, and the
// direction and pixel counters restart. All of this happens on the pipeline
// clock enable en: in the tick that writes a block, the first pixel of the
// next block (if any) is already counted, so blocks follow each other with
// no gap. frame_done pulses with the write of the last block.
//
// Published: 16 counters of 8 bits, the Maximum tree, the 9-bit counter
// whose bit 8 resets the counters and clocks the 8-bit address counter, 256
// four-bit results. This design's choices: the counters saturate at 255 (a
// block whose 256 pixels all share one direction would otherwise wrap to 0;
// with saturation the chosen index is always exact, since a counter at 255
// leaves at most one pixel for the others), the pixel counter counts valid
// pixels rather than every pipeline clock, and the restart is synchronous
// instead of the drawn asynchronous reset.
module stage3
  import orient_pkg::*;
#(
  parameter int BLK_ADDR_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  valid_in,
  input  logic [N_DIR-1:0]      onehot,
  output logic                  wr_en,
  output logic [BLK_ADDR_W-1:0] wr_addr,
  output dir_t                  wr_data,
  output logic                  frame_done,
  output count_t                counts [N_DIR]
);
  logic [8:0] pix_cnt;   // the 9-bit counter
  logic       block_full;

  assign block_full = pix_cnt[8];

  maximum_unit u_max (.cnt(counts), .dir(wr_data));

  assign wr_en      = en && block_full;
  assign frame_done = wr_en && (&wr_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_cnt <= '0;
      wr_addr <= '0;
      for (int d = 0; d < N_DIR; d++) counts[d] <= '0;
    end else if (en) begin
      if (block_full) begin
        wr_addr <= wr_addr + 1'b1;
        pix_cnt <= valid_in ? 9'd1 : 9'd0;
        for (int d = 0; d < N_DIR; d++)
          counts[d] <= (valid_in && onehot[d]) ? count_t'(1) : '0;
      end else if (valid_in) begin
        pix_cnt <= pix_cnt + 1'b1;
        for (int d = 0; d < N_DIR; d++)
          if (onehot[d] && counts[d] != '1) counts[d] <= counts[d] + 1'b1;
      end
    end
  end

  // A valid stage-2 word selects exactly one direction.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                             (en && valid_in) |-> $onehot(onehot))
    else $error("stage3: direction enable lines not one-hot");
endmodule
