// stage2_tb: checks pipeline stage 2: eight {index, S_d} words in, and one
// clock with en later a one-hot 16-bit word marking the index of the least
// S_d (first of equal ones), with the valid bit carried along.
module stage2_tb;
  import orient_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, vin = 0, vq;
  cand_t d [8];
  logic [15:0] oh;

  stage2 dut (.clk(clk), .rst_n(rst_n), .en(en), .valid_in(vin), .d(d),
              .onehot_q(oh), .valid_q(vq));

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
    for (int n = 0; n < 5000; n++) begin
      int best;
      for (int s = 0; s < 8; s++) begin
        d[s].idx = dir_t'(2*s + ($urandom % 2));
        d[s].sd  = (n % 3 == 0) ? sd_t'($urandom % 4) : sd_t'($urandom);
      end
      best = 0;
      for (int s = 1; s < 8; s++) if (d[s].sd < d[best].sd) best = s;
      vin = 1'($urandom);
      en = 1;
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (oh != (16'd1 << d[best].idx) || vq != vin) begin
        failures++;
        if (failures < 10) $display("FAIL got %h expected dir %0d", oh, d[best].idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
