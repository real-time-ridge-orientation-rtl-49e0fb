// stage1_tb: checks pipeline stage 1. Random reference pixels and 128 line
// pixels (some directions made flat to create ties and small sums) are
// applied; one clock with en later the register must hold, for each pair of
// directions (2s, 2s+1), the direction with the smaller sum of absolute
// differences and that sum. With en low the register must hold its value.
module stage1_tb;
  import orient_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, vin = 0, vq;
  pixel_t ref_pix;
  pixel_t taps [128];
  cand_t  q [8];
  cand_t  hold [8];

  stage1 dut (.clk(clk), .rst_n(rst_n), .en(en), .valid_in(vin), .ref_pix(ref_pix),
              .taps(taps), .q(q), .valid_q(vq));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      int sd [16];
      ref_pix = pixel_t'($urandom);
      for (int t = 0; t < 128; t++) taps[t] = pixel_t'($urandom);
      for (int d = 0; d < 16; d++)
        if ($urandom % 4 == 0)
          for (int k = 0; k < 8; k++) taps[d*8+k] = ref_pix + pixel_t'($urandom % 3);
      for (int d = 0; d < 16; d++) begin
        sd[d] = 0;
        for (int k = 0; k < 8; k++)
          sd[d] += (taps[d*8+k] > ref_pix) ? taps[d*8+k] - ref_pix : ref_pix - taps[d*8+k];
      end
      vin = n[0];
      en = 1;
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (vq != n[0]) failures++;
      for (int s = 0; s < 8; s++) begin
        int w;
        w = (sd[2*s+1] < sd[2*s]) ? 2*s+1 : 2*s;
        checks++;
        if (int'(q[s].idx) != w || int'(q[s].sd) != sd[w]) begin
          failures++;
          if (failures < 10) $display("FAIL s=%0d got %0d/%0d exp %0d/%0d", s, q[s].idx, q[s].sd, w, sd[w]);
        end
      end
      hold = q;
      ref_pix = ~ref_pix;
      @(posedge clk); #1;
      checks++;
      if (q != hold) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
