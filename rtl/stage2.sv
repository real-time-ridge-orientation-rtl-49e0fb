// stage2: pipeline stage 2, the remaining three layers of the Minimum tree
// and the decoder at its output, followed by the stage 2/3 register.
//
// The eight {index, S_d} words from stage 1 are reduced by 4 + 2 + 1
// switches to the index of the least S_d, the pixel direction; a 4-to-16
// decoder turns it into one enable line per direction counter, captured in
// the 16-bit pipeline register on en.
module stage2
  import orient_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             valid_in,
  input  cand_t            d [N_DIR/2],
  output logic [N_DIR-1:0] onehot_q,
  output logic             valid_q
);
  cand_t            best [1];
  logic [N_DIR-1:0] dec;

  minimum_unit #(.N_IN(N_DIR/2), .N_OUT(1)) u_min (.cin(d), .cout(best));

  always_comb begin
    dec = '0;
    dec[best[0].idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      onehot_q <= '0;
      valid_q  <= 1'b0;
    end else if (en) begin
      onehot_q <= dec;
      valid_q  <= valid_in;
    end
  end
endmodule
