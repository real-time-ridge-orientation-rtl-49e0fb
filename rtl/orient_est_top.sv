// orient_est_top: pipelined block orientation estimator for fingerprint
// images.
//
// The host loads a 2^COORD_W x 2^COORD_W grey-level image (256 x 256 by
// default) through img_we/img_waddr/img_wdata, which write all N_RAM image
// copies at once, and pulses start. The pipeline then estimates the
// direction of every pixel (one of 16, by least sum of absolute differences
// along eight pixels in each direction) and, per 16 x 16 block, the direction
// that occurs most often. Block results (4 bits each, block address
// {block_row, block_col}) go to the orientation RAM, read through
// ori_raddr/ori_rdata; done pulses when the last block is written and busy
// is high from start until then.
//
// Pipeline (one clock, clk = CLK1; the pipeline clock CLK2 is the enable
// tick from stage 0):
//   stage 0  fetch 128 + 1 pixels in STEPS = 128/N_RAM clocks
//   [bank]   optional second bank of pixel registers (STAGE_REGS = 1)
//   stage 1  16 SdCUs + first Minimum layer   -> 8 x 15-bit register
//   stage 2  rest of Minimum + decoder         -> 16-bit register
//   stage 3  direction counters + Maximum      -> orientation RAM
// A pixel takes one pipeline period of 2*STEPS clocks (STEPS with the extra
// bank), so a whole image takes H*L*256, *128, *32 or *16 clocks for
// (N_RAM, STAGE_REGS) = (1,0), (1,1), (8,0), (8,1), plus a few periods to
// drain. Defaults are the implemented configuration: eight image memories,
// no extra bank (H*L*32 clocks).
module orient_est_top
  import orient_pkg::*;
#(
  parameter int N_RAM      = 8,
  parameter bit STAGE_REGS = 1'b0,
  parameter int COORD_W    = 8,
  localparam int AW        = 2 * COORD_W,
  localparam int BAW       = 2 * (COORD_W - BLK_BITS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // image load port
  input  logic           img_we,
  input  logic [AW-1:0]  img_waddr,
  input  pixel_t         img_wdata,
  // control
  input  logic           start,
  output logic           busy,
  output logic           done,
  // orientation results
  input  logic [BAW-1:0] ori_raddr,
  output dir_t           ori_rdata
);
  // ---- stage 0 and the image memories ------------------------------------
  logic [AW-1:0] ram_addr [N_RAM];
  pixel_t        ram_data [N_RAM];
  pixel_t        ref_data [N_RAM];
  logic [AW-1:0] ref_addr;
  pixel_t        taps [N_TAPS];
  pixel_t        ref_pix;
  logic          tick, ph0, load_valid, bank_valid;
  logic [COORD_W-1:0] cur_i, cur_j;

  for (genvar r = 0; r < N_RAM; r++) begin : g_ram
    image_ram #(.ADDR_W(AW), .DATA_W(PIX_W)) u_img (
      .clk    (clk),
      .we     (img_we),
      .waddr  (img_waddr),
      .wdata  (img_wdata),
      .ra_addr(ram_addr[r]),
      .ra_data(ram_data[r]),
      .rb_addr(ref_addr),
      .rb_data(ref_data[r])
    );
  end

  stage0_fetch #(.N_RAM(N_RAM), .STAGE_REGS(STAGE_REGS), .COORD_W(COORD_W)) u_s0 (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .ram_addr  (ram_addr),
    .ram_data  (ram_data),
    .ref_addr  (ref_addr),
    .ref_data  (ref_data[0]),
    .taps      (taps),
    .ref_pix   (ref_pix),
    .tick      (tick),
    .ph0       (ph0),
    .load_valid(load_valid),
    .bank_valid(bank_valid),
    .cur_i     (cur_i),
    .cur_j     (cur_j)
  );

  // ---- optional register bank between stage 0 and stage 1 ----------------
  pixel_t s1_taps [N_TAPS];
  pixel_t s1_ref;
  logic   s1_valid;

  if (STAGE_REGS) begin : g_bank
    pixel_t bank [N_TAPS];
    pixel_t bank_ref;
    logic   bank_v;
    // At the first clock of a period stage 0 holds the complete previous
    // pixel; copy it while stage 0 starts overwriting with the next one.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        bank_v   <= 1'b0;
        bank_ref <= '0;
        for (int t = 0; t < N_TAPS; t++) bank[t] <= '0;
      end else if (ph0) begin
        bank_v   <= bank_valid;
        bank_ref <= ref_pix;
        bank     <= taps;
      end
    end
    assign s1_taps  = bank;
    assign s1_ref   = bank_ref;
    assign s1_valid = bank_v;
  end else begin : g_direct
    assign s1_taps  = taps;
    assign s1_ref   = ref_pix;
    assign s1_valid = load_valid;
  end

  // ---- stages 1 to 3 ------------------------------------------------------
  cand_t            s2_in [N_DIR/2];
  logic             s2_valid;
  logic [N_DIR-1:0] s3_onehot;
  logic             s3_valid;
  logic             wr_en;
  logic [BAW-1:0]   wr_addr;
  dir_t             wr_data;
  count_t           counts [N_DIR];

  stage1 u_s1 (
    .clk(clk), .rst_n(rst_n), .en(tick), .valid_in(s1_valid),
    .ref_pix(s1_ref), .taps(s1_taps), .q(s2_in), .valid_q(s2_valid)
  );

  stage2 u_s2 (
    .clk(clk), .rst_n(rst_n), .en(tick), .valid_in(s2_valid),
    .d(s2_in), .onehot_q(s3_onehot), .valid_q(s3_valid)
  );

  stage3 #(.BLK_ADDR_W(BAW)) u_s3 (
    .clk(clk), .rst_n(rst_n), .en(tick), .valid_in(s3_valid),
    .onehot(s3_onehot), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .frame_done(done), .counts(counts)
  );

  orientation_ram #(.ADDR_W(BAW), .DATA_W(IDX_W)) u_ori (
    .clk  (clk),
    .we   (wr_en),
    .waddr(wr_addr),
    .wdata(wr_data),
    .raddr(ori_raddr),
    .rdata(ori_rdata)
  );

  // ---- busy flag ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             busy <= 1'b0;
    else if (start && !busy) busy <= 1'b1;
    else if (done)          busy <= 1'b0;
  end
endmodule
