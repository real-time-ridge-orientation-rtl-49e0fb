// csa: W-bit carry save adder (3:2 compressor).
//
// Reduces three W-bit operands to a sum word and a carry word with
// x + y + z = sum + (carry << 1). In the S_d calculation unit the carry word
// occupies bit positions 1..W, as the published adder-tree drawing labels it;
// the shift is left to the instantiating module. Purely combinational: one
// full adder per bit and no carry propagation.
module csa #(
  parameter int W = 8
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry   // weight 2^(i+1) for bit i
);
  assign sum   = x ^ y ^ z;
  assign carry = (x & y) | (x & z) | (y & z);
endmodule
