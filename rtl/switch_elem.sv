// switch_elem: the comparator-plus-multiplexer element of the Minimum and
// Maximum trees.
//
// Each input is an {index, value} pair. A comparator decides which value is
// the smaller and a multiplexer passes the winning pair on: with
// FIND_MAX = 0 the smaller value wins (Minimum tree, 15-bit {index, S_d}
// words), with FIND_MAX = 1 the larger one (Maximum tree, 8-bit counts).
// On equal values input a wins; the published text does not say which input
// a tie selects, so this is this design's choice, and with a placed before b
// in both trees it means the lowest direction index wins a tie.
// Purely combinational.
module switch_elem #(
  parameter int IDX_W    = 4,
  parameter int VAL_W    = 11,
  parameter bit FIND_MAX = 1'b0
) (
  input  logic [IDX_W-1:0] a_idx,
  input  logic [VAL_W-1:0] a_val,
  input  logic [IDX_W-1:0] b_idx,
  input  logic [VAL_W-1:0] b_val,
  output logic [IDX_W-1:0] y_idx,
  output logic [VAL_W-1:0] y_val
);
  logic b_wins;

  // Comparator: b replaces a only when strictly better.
  assign b_wins = FIND_MAX ? (b_val > a_val) : (b_val < a_val);

  // Multiplexer
  assign y_idx = b_wins ? b_idx : a_idx;
  assign y_val = b_wins ? b_val : a_val;
endmodule
