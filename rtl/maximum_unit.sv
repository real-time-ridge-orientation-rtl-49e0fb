// maximum_unit: the Maximum circuit, which picks the block orientation.
//
// Sixteen 8-bit direction counts enter a tree of 15 switch elements (layers
// of 8, 4, 2 and 1) built like the Minimum tree but passing on the larger
// count. Only the counts are fed in; the index a first-layer switch forwards
// is the position of its input, and later switches carry it along, so the
// last switch delivers the 4-bit index of the most frequent direction. Ties
// go to the lower index. Purely combinational.
module maximum_unit
  import orient_pkg::*;
(
  input  count_t cnt [N_DIR],
  output dir_t   dir
);
  dir_t   i1 [8], i2 [4], i3 [2];
  count_t c1 [8], c2 [4], c3 [2];
  count_t c4;

  for (genvar s = 0; s < 8; s++) begin : g_l1
    switch_elem #(.IDX_W(IDX_W), .VAL_W(CNT_W), .FIND_MAX(1'b1)) u_sw (
      .a_idx(dir_t'(2*s)),   .a_val(cnt[2*s]),
      .b_idx(dir_t'(2*s+1)), .b_val(cnt[2*s+1]),
      .y_idx(i1[s]),         .y_val(c1[s])
    );
  end
  for (genvar s = 0; s < 4; s++) begin : g_l2
    switch_elem #(.IDX_W(IDX_W), .VAL_W(CNT_W), .FIND_MAX(1'b1)) u_sw (
      .a_idx(i1[2*s]), .a_val(c1[2*s]), .b_idx(i1[2*s+1]), .b_val(c1[2*s+1]),
      .y_idx(i2[s]),   .y_val(c2[s])
    );
  end
  for (genvar s = 0; s < 2; s++) begin : g_l3
    switch_elem #(.IDX_W(IDX_W), .VAL_W(CNT_W), .FIND_MAX(1'b1)) u_sw (
      .a_idx(i2[2*s]), .a_val(c2[2*s]), .b_idx(i2[2*s+1]), .b_val(c2[2*s+1]),
      .y_idx(i3[s]),   .y_val(c3[s])
    );
  end
  // Last switch: only the index is used.
  switch_elem #(.IDX_W(IDX_W), .VAL_W(CNT_W), .FIND_MAX(1'b1)) u_sw_last (
    .a_idx(i3[0]), .a_val(c3[0]), .b_idx(i3[1]), .b_val(c3[1]),
    .y_idx(dir),   .y_val(c4)
  );
endmodule
