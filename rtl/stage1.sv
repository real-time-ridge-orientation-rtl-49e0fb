// stage1: pipeline stage 1, the sixteen S_d calculation units and the first
// layer of the Minimum tree, followed by the stage 1/2 register.
//
// SdCU d takes the reference pixel and the eight registers 8d .. 8d+7 and
// forms S_d (11 bits). The sixteen {d, S_d} words (15 bits) enter the first
// layer of eight Minimum switches, and the eight winners are captured in the
// 8 x 15-bit pipeline register on the pipeline clock enable en. Placing the
// SdCUs and exactly one switch layer in this stage is the published
// balancing of stage delays. The combinational path has a whole half period
// (or, with the extra register bank, a whole period) of CLK1 cycles to
// settle: a multicycle path. Bits 3:1 of each winner's index are constant
// (switch s can only pass direction 2s or 2s+1); they are kept so the
// register holds the published 15-bit words, and synthesis removes them.
module stage1
  import orient_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   valid_in,
  input  pixel_t ref_pix,
  input  pixel_t taps [N_TAPS],
  output cand_t  q [N_DIR/2],
  output logic   valid_q
);
  cand_t cand [N_DIR];
  cand_t win  [N_DIR/2];

  for (genvar d = 0; d < N_DIR; d++) begin : g_sdcu
    sd_t sd;
    sdcu u_sdcu (.f(ref_pix), .fd(taps[d*N_PIX +: N_PIX]), .sd(sd));
    assign cand[d] = '{idx: dir_t'(d), sd: sd};
  end

  minimum_unit #(.N_IN(N_DIR), .N_OUT(N_DIR/2)) u_min (.cin(cand), .cout(win));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      for (int s = 0; s < N_DIR/2; s++) q[s] <= '0;
    end else if (en) begin
      valid_q <= valid_in;
      q       <= win;
    end
  end
endmodule
