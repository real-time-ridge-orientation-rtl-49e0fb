// orient_est_top_tb: end-to-end test of the orientation estimator on a
// 64 x 64 synthetic fingerprint image (16 blocks), in all four published
// speed configurations, one design instance each:
//   (N_RAM, STAGE_REGS) = (1,0): 256 clocks per pixel, (1,1): 128,
//                         (8,0): 32, (8,1): 16.
// Each instance gets the same image through its load port, is started, and
// must raise done once; the four block orientations are read back and
// compared with the reference model (orient_ref_pkg), and the time from
// start to done must be exactly (pixels + 3) pipeline periods + 1 clock
// ((pixels + 4) periods with the extra bank): one period per pixel, and the
// stage 3 result three pipeline clocks after the fetch. Mechanisms counted (each must occur): blocks
// written, a direction counter saturating, pixels decided by a tie, fetch
// lines wrapping at the image edge, stage 0 fetching while stage 3 counts
// (pipeline overlap), and the extra register bank carrying a pixel.
module orient_est_top_tb;
  import orient_pkg::*;
  import orient_ref_pkg::*;

  localparam int CW  = 6;
  localparam int NPX = 1 << (2 * CW);
  localparam int NBK = NPX / 256;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, img_we = 0, start = 0;
  logic [2*CW-1:0] img_waddr;
  pixel_t          img_wdata;
  logic [2*CW-9:0] ori_raddr;

  logic busy [4], done [4];
  dir_t ori_rdata [4];

  orient_est_top #(.N_RAM(1), .STAGE_REGS(1'b0), .COORD_W(CW)) dut0 (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .start,
    .busy(busy[0]), .done(done[0]), .ori_raddr, .ori_rdata(ori_rdata[0]));
  orient_est_top #(.N_RAM(1), .STAGE_REGS(1'b1), .COORD_W(CW)) dut1 (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .start,
    .busy(busy[1]), .done(done[1]), .ori_raddr, .ori_rdata(ori_rdata[1]));
  orient_est_top #(.N_RAM(8), .STAGE_REGS(1'b0), .COORD_W(CW)) dut2 (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .start,
    .busy(busy[2]), .done(done[2]), .ori_raddr, .ori_rdata(ori_rdata[2]));
  orient_est_top #(.N_RAM(8), .STAGE_REGS(1'b1), .COORD_W(CW)) dut3 (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .start,
    .busy(busy[3]), .done(done[3]), .ori_raddr, .ori_rdata(ori_rdata[3]));

  always #5 clk = ~clk;

  int clk_per_px [4] = '{256, 128, 32, 16};
  int cyc = 0, start_cyc = 0;
  int done_cyc [4] = '{-1, -1, -1, -1};
  int done_cnt [4] = '{0, 0, 0, 0};
  int n_sat = 0, n_overlap = 0, n_bank = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < 4; c++)
      if (done[c]) begin
        done_cnt[c] <= done_cnt[c] + 1;
        done_cyc[c] <= cyc;
      end
    if (dut2.u_s3.counts[0] == 8'd255 && dut2.u_s3.block_full) n_sat <= n_sat + 1;
    if (dut2.tick && dut2.load_valid && dut2.s3_valid) n_overlap <= n_overlap + 1;
    if (dut3.ph0 && dut3.bank_valid) n_bank <= n_bank + 1;
  end

  logic [7:0] img [];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_dir [NBK];
    bit full;
    int ties, n_full = 0, n_ties = 0, n_wrap;
    init_ref();
    img = new[NPX];
    for (int i = 0; i < (1 << CW); i++)
      for (int j = 0; j < (1 << CW); j++) img[(i << CW) | j] = gen_pixel(i, j, CW, 2);
    for (int b = 0; b < NBK; b++) begin
      exp_dir[b] = ref_block_dir(img, b >> (CW - 4), b & ((1 << (CW - 4)) - 1), CW, full, ties);
      if (full) n_full++;
      n_ties += ties;
      $display("block %0d: expected direction %0d (%0d tied pixels)", b, exp_dir[b], ties);
    end
    // every pixel in the first and last 8 rows and columns fetches across the edge
    n_wrap = NPX - ((1 << CW) - 16) * ((1 << CW) - 16);

    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < NPX; a++) begin
      img_we <= 1; img_waddr <= (2*CW)'(a); img_wdata <= img[a];
      @(posedge clk);
    end
    img_we <= 0;
    repeat (7) @(posedge clk);
    start <= 1; start_cyc = cyc; @(posedge clk); start <= 0;

    wait (done_cnt[0] > 0);
    repeat (600) @(posedge clk);

    for (int c = 0; c < 4; c++) begin
      int t, lo, hi;
      // The last pixel is fetched in period NPX-1, counted at the end of
      // period NPX+1 (three pipeline clocks, one more with the bank) and its
      // block written at the next tick; start is sampled one clock before
      // period 0 begins.
      t  = done_cyc[c] - start_cyc;
      lo = (NPX + 3 + (c % 2)) * clk_per_px[c] + 1;
      hi = lo;
      $display("config %0d: %0d clocks from start to done (%0d per pixel)", c, t,
               clk_per_px[c]);
      checks += 3;
      if (done_cnt[c] != 1) failures++;
      if (busy[c]) failures++;
      if (t < lo || t > hi) begin
        failures++;
        $display("FAIL config %0d time %0d outside [%0d, %0d]", c, t, lo, hi);
      end
    end
    for (int b = 0; b < NBK; b++) begin
      ori_raddr = (2*CW-8)'(b);
      #1;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (int'(ori_rdata[c]) != exp_dir[b]) begin
          failures++;
          $display("FAIL config %0d block %0d: got %0d expected %0d", c, b, ori_rdata[c], exp_dir[b]);
        end
      end
    end
    $display("mechanisms: blocks written %0d, saturated counter clocks %0d, tied pixels %0d, edge-wrapping pixels %0d, overlap ticks %0d, bank copies %0d",
             NBK, n_sat, n_ties, n_wrap, n_overlap, n_bank);
    checks += 5;
    if (n_full == 0 || n_sat == 0) failures++;
    if (n_ties == 0) failures++;
    if (n_wrap == 0) failures++;
    if (n_overlap == 0) failures++;
    if (n_bank == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
