// stage3_tb: checks pipeline stage 3 on a reduced frame of 4 blocks
// (BLK_ADDR_W = 2). Each block is 256 valid one-hot words, interleaved with
// pipeline clocks that carry no valid word. Block 0 has all 256 pixels in
// direction 5 (its counter saturates at 255 and must still win); the other
// blocks have random histograms. Checked: exactly one write per block, at
// the address of the block, with the most frequent direction (lowest on a
// tie), written in the tick after the 256th pixel; frame_done with the last
// write; counter saturation seen.
module stage3_tb;
  import orient_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, vin = 0;
  logic [15:0] oh = '0;
  logic        wr_en, fdone;
  logic [1:0]  wr_addr;
  dir_t        wr_data;
  count_t      counts [16];

  stage3 #(.BLK_ADDR_W(2)) dut (.clk(clk), .rst_n(rst_n), .en(en), .valid_in(vin),
    .onehot(oh), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .frame_done(fdone), .counts(counts));

  always #5 clk = ~clk;

  int expected [4];
  int writes = 0, dones = 0, sat_seen = 0;

  always @(posedge clk) begin
    if (wr_en) begin
      checks += 2;
      if (int'(wr_addr) != writes) failures++;
      if (int'(wr_data) != expected[writes & 3]) begin
        failures++;
        $display("FAIL block %0d got %0d expected %0d", writes, wr_data, expected[writes & 3]);
      end
      writes <= writes + 1;
    end
    if (fdone) dones <= dones + 1;
    if (counts[5] == 8'd255) sat_seen <= 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int b = 0; b < 4; b++) begin
      int h [16];
      int dirs [256];
      for (int d = 0; d < 16; d++) h[d] = 0;
      for (int p = 0; p < 256; p++) begin
        dirs[p] = (b == 0) ? 5 : (b == 3 ? ($urandom % 3) * 4 : $urandom % 16);
        h[dirs[p]]++;
      end
      expected[b] = 0;
      for (int d = 1; d < 16; d++) if (h[d] > h[expected[b]]) expected[b] = d;
      for (int p = 0; p < 256; p++) begin
        // one idle pipeline clock now and then
        if ($urandom % 5 == 0) begin
          en <= 1; vin <= 0; oh <= 16'h0000; @(posedge clk);
        end
        en <= 1; vin <= 1; oh <= 16'd1 << dirs[p]; @(posedge clk);
        en <= 0; vin <= 0;
        repeat ($urandom % 3) @(posedge clk);
        #1;
        checks++;
        // a block is written only in the tick after its 256th pixel
        if (writes != b) begin
          failures++;
          $display("FAIL early/late write: block %0d pixel %0d writes %0d", b, p, writes);
        end
      end
    end
    en <= 1; vin <= 0; @(posedge clk);  // tick that writes the last block
    en <= 0;
    repeat (3) @(posedge clk);
    checks += 3;
    if (writes != 4) failures++;
    if (dones != 1) failures++;
    if (!sat_seen) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
