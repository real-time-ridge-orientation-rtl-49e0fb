// avd: absolute value of difference of two 8-bit grey levels,
// d = |f - fd| = max(f, fd) - min(f, fd).
//
// Structure as published: a comparator looks at both pixels, one
// multiplexer routes the larger one to the A input of an 8-bit carry
// lookahead adder, a second multiplexer routes the smaller one, which is
// inverted bit by bit into the B input, and the adder carry-in is tied to 1,
// so the adder forms larger + ~smaller + 1 = larger - smaller. The carry out
// is not used (it is always 1). Which comparator output drives which mux
// input is not printed; the select rule here is this design's choice and only
// has to route the larger value to A. Purely combinational.
module avd
  import orient_pkg::*;
(
  input  pixel_t f,    // reference pixel f(i,j)
  input  pixel_t fd,   // pixel k of direction d, f_d(i_k, j_k)
  output pixel_t d     // |f - fd|
);
  logic   fd_gt;       // comparator: fd > f
  pixel_t larger, smaller;
  logic   cout_unused;

  assign fd_gt   = (fd > f);
  assign larger  = fd_gt ? fd : f;
  assign smaller = fd_gt ? f  : fd;

  cla_adder #(.W(PIX_W)) u_cla (
    .a   (larger),
    .b   (~smaller),
    .cin (1'b1),
    .sum (d),
    .cout(cout_unused)
  );
endmodule
