// stage0_fetch_tb: checks the pixel fetch stage in two configurations.
//   A: eight memories, no extra bank (the default): a pipeline period is
//      32 clocks and at its last clock (tick) all 128 registers and the
//      reference register hold the pixels of the current (i, j).
//   B: one memory, extra bank, 32 x 32 image: a period is 128 clocks and the
//      registers are complete in the first clock of the next period.
// Expected pixels come from a behavioural image array and trigonometric
// offsets (orient_ref_pkg), with coordinates wrapping at the image edge.
module stage0_fetch_tb;
  import orient_pkg::*;
  import orient_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;

  always #5 clk = ~clk;

  // ---------------- configuration A ----------------
  logic [15:0] a_addr [8];
  pixel_t      a_data [8];
  logic [15:0] a_raddr;
  pixel_t      a_taps [128];
  pixel_t      a_ref;
  logic        a_tick, a_ph0, a_lv, a_bv;
  logic [7:0]  a_i, a_j;
  pixel_t      img_a [65536];

  stage0_fetch #(.N_RAM(8), .STAGE_REGS(1'b0), .COORD_W(8)) dut_a (
    .clk(clk), .rst_n(rst_n), .start(start),
    .ram_addr(a_addr), .ram_data(a_data), .ref_addr(a_raddr), .ref_data(img_a[a_raddr]),
    .taps(a_taps), .ref_pix(a_ref), .tick(a_tick), .ph0(a_ph0),
    .load_valid(a_lv), .bank_valid(a_bv), .cur_i(a_i), .cur_j(a_j));

  for (genvar r = 0; r < 8; r++) begin : g_a
    assign a_data[r] = img_a[a_addr[r]];
  end

  // ---------------- configuration B ----------------
  logic [9:0]  b_addr [1];
  pixel_t      b_data [1];
  logic [9:0]  b_raddr;
  pixel_t      b_taps [128];
  pixel_t      b_ref;
  logic        b_tick, b_ph0, b_lv, b_bv;
  logic [4:0]  b_i, b_j;
  pixel_t      img_b [1024];

  stage0_fetch #(.N_RAM(1), .STAGE_REGS(1'b1), .COORD_W(5)) dut_b (
    .clk(clk), .rst_n(rst_n), .start(start),
    .ram_addr(b_addr), .ram_data(b_data), .ref_addr(b_raddr), .ref_data(img_b[b_raddr]),
    .taps(b_taps), .ref_pix(b_ref), .tick(b_tick), .ph0(b_ph0),
    .load_valid(b_lv), .bank_valid(b_bv), .cur_i(b_i), .cur_j(b_j));

  assign b_data[0] = img_b[b_addr[0]];

  // Compare a register bank with the expected pixels of (i, j).
  function automatic int bank_errors(input pixel_t taps [128], input pixel_t refp,
                                     input int i, input int j, input int cw, input bit is_a);
    int errs = 0, msk = (1 << cw) - 1;
    pixel_t e;
    e = is_a ? img_a[(i << cw) | j] : img_b[(i << cw) | j];
    if (refp != e) errs++;
    for (int d = 0; d < 16; d++)
      for (int k = 1; k <= 8; k++) begin
        int di, dj, ii, jj;
        ref_offset(d, k, di, dj);
        ii = (i + di) & msk;
        jj = (j + dj) & msk;
        e = is_a ? img_a[(ii << cw) | jj] : img_b[(ii << cw) | jj];
        if (taps[d*8 + k - 1] != e) errs++;
      end
    return errs;
  endfunction

  int a_last_tick = -1, b_last_tick = -1, cyc = 0;
  int a_pix = 0, b_pix = 0;
  int b_pi, b_pj;
  bit b_pending = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && a_tick && a_lv) begin
      checks++;
      if (bank_errors(a_taps, a_ref, int'(a_i), int'(a_j), 8, 1'b1) != 0) begin
        failures++;
        if (failures < 10) $display("FAIL A pixel (%0d,%0d)", a_i, a_j);
      end
      if (a_last_tick >= 0) begin
        checks++;
        if (cyc - a_last_tick != 32) begin
          failures++;
          $display("FAIL A period %0d", cyc - a_last_tick);
        end
      end
      a_last_tick <= cyc;
      a_pix <= a_pix + 1;
    end
    if (rst_n && b_pending && b_ph0) begin
      checks++;
      if (!b_bv || bank_errors(b_taps, b_ref, b_pi, b_pj, 5, 1'b0) != 0) begin
        failures++;
        if (failures < 10) $display("FAIL B pixel (%0d,%0d)", b_pi, b_pj);
      end
      b_pending <= 0;
    end
    if (rst_n && b_tick && b_lv) begin
      b_pi <= int'(b_i); b_pj <= int'(b_j); b_pending <= 1;
      if (b_last_tick >= 0) begin
        checks++;
        if (cyc - b_last_tick != 128) begin
          failures++;
          $display("FAIL B period %0d", cyc - b_last_tick);
        end
      end
      b_last_tick <= cyc;
      b_pix <= b_pix + 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 65536; a++) img_a[a] = pixel_t'($urandom);
    for (int a = 0; a < 1024; a++)  img_b[a] = pixel_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);   // start in the middle of a period
    start <= 1; @(posedge clk); start <= 0;
    wait (b_pix == 300);
    repeat (200) @(posedge clk);
    checks++;
    if (a_pix < 1000) failures++;
    $display("stage0: %0d pixels checked (A), %0d (B)", a_pix, b_pix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
