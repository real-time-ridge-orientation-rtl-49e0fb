// min_layer: one layer of Minimum switch elements.
//
// N {index, S_d} candidates enter; neighbours (0,1), (2,3), ... are paired
// in one switch element each and the N/2 winners (smaller S_d, lower index
// on a tie) leave. Purely combinational.
module min_layer
  import orient_pkg::*;
#(
  parameter int N = 16
) (
  input  cand_t cin  [N],
  output cand_t cout [N/2]
);
  for (genvar s = 0; s < N / 2; s++) begin : g_sw
    switch_elem #(.IDX_W(IDX_W), .VAL_W(SD_W), .FIND_MAX(1'b0)) u_sw (
      .a_idx(cin[2*s].idx),   .a_val(cin[2*s].sd),
      .b_idx(cin[2*s+1].idx), .b_val(cin[2*s+1].sd),
      .y_idx(cout[s].idx),    .y_val(cout[s].sd)
    );
  end
endmodule
