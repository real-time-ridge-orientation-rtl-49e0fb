// offset_rom: the Offset-ROM of the pixel fetch stage.
//
// Holds, for each of the 128 pixels an orientation needs (16 directions x 8
// pixels, flat index t = 8*d + (k-1)), the signed row and column offset
// (two 8-bit numbers) from the reference pixel. The fetch stage reads it with
// its step counter: with N_RAM image memories working in parallel, one
// address delivers the N_RAM words t = step*N_RAM + r, r = 0..N_RAM-1, one
// for each address adder pair. With N_RAM = 8 (the default) a step is one
// whole direction and the ROM has 16 words of 8 offset pairs; with N_RAM = 1
// it is the 128-word ROM addressed by a 7-bit counter.
// The contents follow orient_pkg::offset_of, a formula that reproduces the
// two published example directions; the others are this design's choice.
// Combinational read.
module offset_rom
  import orient_pkg::*;
#(
  parameter int N_RAM  = 8,
  localparam int STEPS = N_TAPS / N_RAM,
  localparam int SW    = (STEPS > 1) ? $clog2(STEPS) : 1
) (
  input  logic [SW-1:0] step,
  output offset_t       ofs [N_RAM]
);
  offset_t rom [N_TAPS];

  always_comb begin
    for (int t = 0; t < N_TAPS; t++) begin
      rom[t] = offset_of(t / N_PIX, t % N_PIX + 1);
    end
  end

  for (genvar r = 0; r < N_RAM; r++) begin : g_lane
    assign ofs[r] = rom[int'(step) * N_RAM + r];
  end
endmodule
