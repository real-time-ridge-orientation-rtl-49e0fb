// sdcu: S_d calculation unit, S_d = sum_{k=1..8} |f(i,j) - f_d(i_k,j_k)|.
//
// Eight AVD blocks produce eight 8-bit differences, which a carry save adder
// tree reduces to a sum word and a carry word; a 10-bit carry lookahead adder
// then produces the 11-bit result. The tree is the published one, with the
// published bit ranges (sum words start at bit 0, carry words at bit 1):
//   csa1 = AVD0 + AVD1 + AVD2             -> s1[0-7],  c1[1-8]
//   csa2 = AVD3 + AVD4 + AVD5             -> s2[0-7],  c2[1-8]
//   csa3 = c1 + s1 + c2                   -> s3[0-8],  c3[1-9]
//   csa4 = s2 + AVD6 + AVD7               -> s4[0-7],  c4[1-8]
//   csa5 = s3 + c4 + s4                   -> s5[0-8],  c5[1-9]
//   csa6 = c3 + c5 + s5                   -> s6[0-9],  c6[1-10]
//   S_d  = s6 + c6: bit 0 is s6[0]; a 10-bit CLA adds s6[9:1] and c6[10:1]
//          into bits 1..10.
// The largest S_d is 8 * 255 = 2040, so the CLA carry out (bit 11) is always
// 0 and is not used. Purely combinational.
module sdcu
  import orient_pkg::*;
(
  input  pixel_t f,               // reference pixel
  input  pixel_t fd [N_PIX],      // the 8 pixels of this direction
  output sd_t    sd
);
  pixel_t a [N_PIX];

  for (genvar k = 0; k < N_PIX; k++) begin : g_avd
    avd u_avd (.f(f), .fd(fd[k]), .d(a[k]));
  end

  // Word values, all aligned to weight 2^0 (carry words shifted left by 1).
  logic [7:0] s1r, c1r, s2r, c2r, s4r, c4r;
  logic [8:0] s3r, c3r, s5r, c5r;
  logic [9:0] s6r, c6r;

  csa #(.W(8)) u_csa1 (.x(a[0]), .y(a[1]), .z(a[2]), .sum(s1r), .carry(c1r));
  csa #(.W(8)) u_csa2 (.x(a[3]), .y(a[4]), .z(a[5]), .sum(s2r), .carry(c2r));
  // csa3: c1[1-8], s1[0-7], c2[1-8] -> 9-bit operands
  csa #(.W(9)) u_csa3 (.x({c1r, 1'b0}), .y({1'b0, s1r}), .z({c2r, 1'b0}),
                       .sum(s3r), .carry(c3r));
  csa #(.W(8)) u_csa4 (.x(s2r), .y(a[6]), .z(a[7]), .sum(s4r), .carry(c4r));
  // csa5: s3[0-8], c4[1-8], s4[0-7]
  csa #(.W(9)) u_csa5 (.x(s3r), .y({c4r, 1'b0}), .z({1'b0, s4r}),
                       .sum(s5r), .carry(c5r));
  // csa6: c3[1-9], c5[1-9], s5[0-8] -> 10-bit operands
  csa #(.W(10)) u_csa6 (.x({c3r, 1'b0}), .y({c5r, 1'b0}), .z({1'b0, s5r}),
                        .sum(s6r), .carry(c6r));

  // Final 10-bit CLA on bit positions 1..10.
  logic [9:0] hi;
  logic       cout_unused;
  cla_adder #(.W(10)) u_cla (
    .a   ({1'b0, s6r[9:1]}),
    .b   (c6r),
    .cin (1'b0),
    .sum (hi),
    .cout(cout_unused)
  );

  assign sd = {hi, s6r[0]};
endmodule
