// minimum_unit: the Minimum circuit, or a contiguous part of it.
//
// Reduces N_IN {index, S_d} candidates to N_OUT through log2(N_IN/N_OUT)
// layers of switch elements (min_layer), each layer halving the number of
// candidates. The complete circuit is N_IN = 16, N_OUT = 1: 8 + 4 + 2 + 1 =
// 15 switches, and the last one delivers the index of the least S_d (the
// pixel direction). In the pipeline the tree is split: stage 1 holds the
// first layer (16 -> 8) and stage 2 the remaining three (8 -> 1).
// Ties go to the lower index. Up to four layers. Purely combinational.
module minimum_unit
  import orient_pkg::*;
#(
  parameter int N_IN  = 16,
  parameter int N_OUT = 1
) (
  input  cand_t cin  [N_IN],
  output cand_t cout [N_OUT]
);
  localparam int LAYERS = $clog2(N_IN / N_OUT);
  localparam int N1 = (N_IN >> 1) > 0 ? (N_IN >> 1) : 1;
  localparam int N2 = (N_IN >> 2) > 0 ? (N_IN >> 2) : 1;
  localparam int N3 = (N_IN >> 3) > 0 ? (N_IN >> 3) : 1;

  if (LAYERS < 1 || LAYERS > 4 || (N_OUT << LAYERS) != N_IN) begin : g_bad
    $error("minimum_unit: N_IN/N_OUT must be 2, 4, 8 or 16");
  end

  cand_t l1 [N1];

  min_layer #(.N(N_IN)) u_l1 (.cin(cin), .cout(l1));

  if (LAYERS == 1) begin : g_out1
    assign cout = l1;
  end else begin : g_more1
    cand_t l2 [N2];
    min_layer #(.N(N1)) u_l2 (.cin(l1), .cout(l2));
    if (LAYERS == 2) begin : g_out2
      assign cout = l2;
    end else begin : g_more2
      cand_t l3 [N3];
      min_layer #(.N(N2)) u_l3 (.cin(l2), .cout(l3));
      if (LAYERS == 3) begin : g_out3
        assign cout = l3;
      end else begin : g_more3
        min_layer #(.N(N3)) u_l4 (.cin(l3), .cout(cout));
      end
    end
  end
endmodule
