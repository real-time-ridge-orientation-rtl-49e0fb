// orient_est_full_tb: one complete frame through the estimator at its
// default size and configuration: a 256 x 256 synthetic fingerprint image
// (256 blocks), eight image memories, no extra register bank. The image is
// loaded, the design started, and all 256 block orientations are compared
// with the reference model (orient_ref_pkg). The time from start to done
// must be exactly 65536 pixels x 32 clocks plus three pipeline periods of
// latency and one clock for start (see orient_est_top_tb).
// Also counted: blocks whose 256 pixels all choose one direction
// (counter saturation) and pixels decided by a tie.
module orient_est_full_tb;
  import orient_pkg::*;
  import orient_ref_pkg::*;

  localparam int CW  = 8;
  localparam int NPX = 1 << (2 * CW);
  localparam int NBK = NPX / 256;
  localparam int CPP = 32;   // clocks per pixel, eight memories, no bank

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, img_we = 0, start = 0;
  logic [15:0] img_waddr;
  pixel_t      img_wdata;
  logic [7:0]  ori_raddr;
  logic        busy, done;
  dir_t        ori_rdata;

  orient_est_top dut (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .start,
    .busy, .done, .ori_raddr, .ori_rdata);

  always #5 clk = ~clk;

  int cyc = 0, start_cyc = 0, done_cyc = -1, done_cnt = 0, n_sat = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (done) begin
      done_cnt <= done_cnt + 1;
      done_cyc <= cyc;
    end
    if (dut.u_s3.block_full && dut.tick && dut.u_s3.counts[0] == 8'd255) n_sat <= n_sat + 1;
  end

  logic [7:0] img [];

  initial begin
    repeat (2500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_dir [NBK];
    bit full;
    int ties, n_full = 0, n_ties = 0, t, n_bad = 0;
    int hist [16];
    init_ref();
    img = new[NPX];
    for (int i = 0; i < (1 << CW); i++)
      for (int j = 0; j < (1 << CW); j++) img[(i << CW) | j] = gen_pixel(i, j, CW, 0);
    for (int d = 0; d < 16; d++) hist[d] = 0;
    for (int b = 0; b < NBK; b++) begin
      exp_dir[b] = ref_block_dir(img, b >> (CW - 4), b & ((1 << (CW - 4)) - 1), CW, full, ties);
      hist[exp_dir[b]]++;
      if (full) n_full++;
      n_ties += ties;
    end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < NPX; a++) begin
      img_we <= 1; img_waddr <= 16'(a); img_wdata <= img[a];
      @(posedge clk);
    end
    img_we <= 0;
    repeat (5) @(posedge clk);
    start <= 1; start_cyc = cyc; @(posedge clk); start <= 0;
    wait (done_cnt > 0);
    repeat (100) @(posedge clk);

    t = done_cyc - start_cyc;
    $display("frame: %0d clocks from start to done (%0d pixels x %0d = %0d)", t, NPX, CPP, NPX * CPP);
    checks += 3;
    if (done_cnt != 1 || busy) failures++;
    if (t != (NPX + 3) * CPP + 1) failures++;
    if (n_full == 0 || n_sat == 0) failures++;
    for (int b = 0; b < NBK; b++) begin
      ori_raddr = 8'(b);
      #1;
      checks++;
      if (int'(ori_rdata) != exp_dir[b]) begin
        failures++;
        n_bad++;
        if (n_bad < 10) $display("FAIL block %0d: got %0d expected %0d", b, ori_rdata, exp_dir[b]);
      end
    end
    $write("block orientation histogram:");
    for (int d = 0; d < 16; d++) $write(" %0d", hist[d]);
    $display("");
    $display("saturated blocks %0d, tied pixels %0d", n_full, n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
