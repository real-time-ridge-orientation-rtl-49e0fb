// minimum_unit_tb: checks the complete Minimum tree (16 -> 1) and its first
// layer alone (16 -> 8, as used in stage 1) on random S_d values, with
// frequent ties; the winner must be the least S_d, lowest index on a tie.
module minimum_unit_tb;
  import orient_pkg::*;
  int checks = 0, failures = 0;
  cand_t cin [16];
  cand_t c1 [1];
  cand_t c8 [8];

  minimum_unit #(.N_IN(16), .N_OUT(1)) dut   (.cin(cin), .cout(c1));
  minimum_unit #(.N_IN(16), .N_OUT(8)) dut_l1 (.cin(cin), .cout(c8));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int best, bsd;
      for (int d = 0; d < 16; d++) begin
        cin[d].idx = dir_t'(d);
        cin[d].sd  = (n % 3 == 0) ? sd_t'($urandom % 8) : sd_t'($urandom);
      end
      #1;
      best = 0; bsd = int'(cin[0].sd);
      for (int d = 1; d < 16; d++)
        if (int'(cin[d].sd) < bsd) begin best = d; bsd = int'(cin[d].sd); end
      checks++;
      if (int'(c1[0].idx) != best || int'(c1[0].sd) != bsd) begin
        failures++;
        if (failures < 10) $display("FAIL min idx %0d expected %0d", c1[0].idx, best);
      end
      for (int s = 0; s < 8; s++) begin
        int w;
        w = (cin[2*s+1].sd < cin[2*s].sd) ? 2*s+1 : 2*s;
        checks++;
        if (int'(c8[s].idx) != w || c8[s].sd != cin[w].sd) begin
          failures++;
          if (failures < 5) $display("FAIL l1 s=%0d got %0d/%0d exp %0d/%0d", s, c8[s].idx, c8[s].sd, w, cin[w].sd);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
