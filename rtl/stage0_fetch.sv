// stage0_fetch: pipeline stage 0, which fetches the 128 pixels one pixel
// orientation needs, plus the reference pixel itself.
//
// Parts, as in the published stage-0 drawing: the ij generator (reference
// coordinate), a step counter, a decoder whose outputs enable the pixel
// registers, the Offset-ROM, carry lookahead adders that add the offsets to
// i and j, and the 128 eight-bit pixel registers. With N_RAM image memory
// copies working in parallel each step reads N_RAM pixels, so a full fetch
// takes STEPS = 128 / N_RAM steps (128 with one memory and a 7-bit counter,
// 16 with the eight copies of the implemented design).
//
// Timing. The published circuit has two clocks: CLK1 steps the counter and
// CLK2, the pipeline clock, advances the ij generator and the later stages.
// Here there is one clock (CLK1) and CLK2 becomes a one-cycle enable, tick,
// derived from a phase counter ph. One pipeline period lasts
//   2*STEPS clocks when STAGE_REGS = 0: ph < STEPS loads (first half of
//            CLK2), the registers then stay still for STEPS clocks while
//            stage 1 works on them (second half);
//   STEPS clocks   when STAGE_REGS = 1: loading never pauses, and the top
//            copies the registers into a second bank at the start of each
//            period (signal ph0).
// tick is high in the last clock of every period. A start pulse (ignored
// while running) restarts the phase counter so that pixel 0 is fetched in
// the first whole period. Step s, lane r loads register t = s*N_RAM + r,
// t = 8*d + (k-1) for pixel k of direction d. The reference pixel is read
// through the second read port of image copy 0 at step 0 (how f(i,j) is
// read is not published; this port is this design's choice). Addresses wrap
// modulo the image size, as COORD_W-bit adders do, so lines near an edge
// continue at the opposite edge.
module stage0_fetch
  import orient_pkg::*;
#(
  parameter int N_RAM      = 8,
  parameter bit STAGE_REGS = 1'b0,
  parameter int COORD_W    = 8,
  localparam int STEPS     = N_TAPS / N_RAM,
  localparam int SW        = (STEPS > 1) ? $clog2(STEPS) : 1,
  localparam int PERIOD    = STAGE_REGS ? STEPS : 2 * STEPS,
  localparam int PW        = $clog2(PERIOD)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // image memory read ports
  output logic [2*COORD_W-1:0] ram_addr [N_RAM],
  input  pixel_t               ram_data [N_RAM],
  output logic [2*COORD_W-1:0] ref_addr,
  input  pixel_t               ref_data,
  // pixel registers
  output pixel_t               taps [N_TAPS],
  output pixel_t               ref_pix,
  // timing
  output logic                 tick,        // last clock of a pipeline period
  output logic                 ph0,         // first clock of a pipeline period
  output logic                 load_valid,  // pixel fetched this period is real
  output logic                 bank_valid,  // registers hold a complete real pixel
  output logic [COORD_W-1:0]   cur_i,
  output logic [COORD_W-1:0]   cur_j
);
  logic [PW-1:0] ph;
  logic [SW-1:0] step;
  logic          loading;
  logic          ij_valid;

  // ---- phase counter (CLK1 counter plus the CLK2 half) -------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= '0;
    end else if (start && !ij_valid) begin
      ph <= '0;
    end else if (ph == PW'(PERIOD - 1)) begin
      ph <= '0;
    end else begin
      ph <= ph + 1'b1;
    end
  end

  assign step    = SW'(ph);
  assign loading = (int'(ph) < STEPS);
  assign tick    = (ph == PW'(PERIOD - 1));
  assign ph0     = (ph == '0);

  // ---- ij generator (advanced by the pipeline clock) ---------------------
  ij_generator #(.COORD_W(COORD_W)) u_ij (
    .clk  (clk),
    .rst_n(rst_n),
    .start(start),
    .adv  (tick),
    .i    (cur_i),
    .j    (cur_j),
    .valid(ij_valid)
  );

  assign load_valid = ij_valid;

  // ---- Offset-ROM and address adders -------------------------------------
  offset_t ofs [N_RAM];

  offset_rom #(.N_RAM(N_RAM)) u_rom (.step(step), .ofs(ofs));

  for (genvar r = 0; r < N_RAM; r++) begin : g_lane
    logic [COORD_W-1:0] ai, aj;
    logic               ci_unused, cj_unused;
    cla_adder #(.W(COORD_W)) u_add_i (
      .a(cur_i), .b(COORD_W'(ofs[r].di)), .cin(1'b0), .sum(ai), .cout(ci_unused)
    );
    cla_adder #(.W(COORD_W)) u_add_j (
      .a(cur_j), .b(COORD_W'(ofs[r].dj)), .cin(1'b0), .sum(aj), .cout(cj_unused)
    );
    assign ram_addr[r] = {ai, aj};
  end

  assign ref_addr = {cur_i, cur_j};

  // ---- decoder and pixel registers ---------------------------------------
  logic [STEPS-1:0] sel;

  always_comb begin
    sel = '0;
    if (loading) sel[step] = 1'b1;
  end

  for (genvar t = 0; t < N_TAPS; t++) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)              taps[t] <= '0;
      else if (sel[t / N_RAM]) taps[t] <= ram_data[t % N_RAM];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ref_pix <= '0;
    else if (sel[0]) ref_pix <= ref_data;
  end

  // bank_valid: set at the end of a period whose pixel was real.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    bank_valid <= 1'b0;
    else if (tick) bank_valid <= ij_valid;
  end
endmodule
