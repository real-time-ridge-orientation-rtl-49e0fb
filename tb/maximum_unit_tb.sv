// maximum_unit_tb: checks the Maximum tree on random 16-entry histograms
// (including ties and the saturated value 255): the result must be the
// index of the largest count, lowest index on a tie.
module maximum_unit_tb;
  import orient_pkg::*;
  int checks = 0, failures = 0;
  count_t cnt [16];
  dir_t   dir;

  maximum_unit dut (.cnt(cnt), .dir(dir));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int best;
      for (int d = 0; d < 16; d++)
        cnt[d] = (n % 3 == 0) ? count_t'($urandom % 4) : count_t'($urandom);
      if (n % 50 == 7) cnt[$urandom % 16] = 8'd255;
      #1;
      best = 0;
      for (int d = 1; d < 16; d++) if (cnt[d] > cnt[best]) best = d;
      checks++;
      if (int'(dir) != best) begin
        failures++;
        if (failures < 10) $display("FAIL max idx %0d expected %0d", dir, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
