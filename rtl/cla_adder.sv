// cla_adder: W-bit carry lookahead adder, sum = a + b + cin, with carry out.
//
// The published design uses carry lookahead adders in three places: inside
// the AVD block (8 bits, Cin = 1 to form a two's complement subtraction), as
// the final 10-bit adder of the S_d calculation unit and as the 8-bit address
// adders of the pixel fetch stage. Only the adder type is given; the
// structure here is the textbook one: generate g = a&b and propagate p = a^b
// per bit, and every carry written as the lookahead expansion
// c[i+1] = g[i] | p[i]&c[i] unrolled from cin, so no carry ripples through a
// chain of full adders. Purely combinational.
module cla_adder #(
  parameter int W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W-1:0] g, p;
  logic [W:0]   c;

  assign g = a & b;
  assign p = a ^ b;

  // Lookahead: c[i+1] = g[i] | p[i]g[i-1] | ... | p[i]..p[0]cin, each carry
  // built from the generate/propagate terms directly.
  always_comb begin
    c[0] = cin;
    for (int i = 0; i < W; i++) begin
      logic term;
      logic pp;
      term = 1'b0;
      pp   = 1'b1;
      for (int j = i; j >= 0; j--) begin
        term = term | (pp & g[j]);
        pp   = pp & p[j];
      end
      c[i+1] = term | (pp & cin);
    end
  end

  assign sum  = p ^ c[W-1:0];
  assign cout = c[W];
endmodule
