// offset_rom_tb: checks the Offset-ROM, both as the 16-word x 8-lane ROM of
// the eight-memory configuration and as the 128-word ROM of the
// one-memory configuration, against offsets derived from trigonometry
// (orient_ref_pkg), and against the two published example directions
// (2 and 10), cell by cell.
module offset_rom_tb;
  import orient_pkg::*;
  import orient_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [3:0] step8;
  offset_t    ofs8 [8];
  logic [6:0] step1;
  offset_t    ofs1 [1];

  offset_rom #(.N_RAM(8)) dut8 (.step(step8), .ofs(ofs8));
  offset_rom #(.N_RAM(1)) dut1 (.step(step1), .ofs(ofs1));

  // Published example lines, k = 1..8: {di, dj}
  int fig_d2  [8][2] = '{'{0,1},'{1,2},'{1,3},'{2,4},'{2,5},'{3,6},'{3,7},'{4,8}};
  int fig_d10 [8][2] = '{'{1,0},'{2,-1},'{3,-1},'{4,-2},'{5,-2},'{6,-3},'{7,-3},'{8,-4}};

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 16; d++) begin
      step8 = 4'(d);
      for (int k = 1; k <= 8; k++) begin
        int di, dj;
        step1 = 7'(d * 8 + k - 1);
        #1;
        ref_offset(d, k, di, dj);
        checks += 2;
        if (int'(ofs8[k-1].di) != di || int'(ofs8[k-1].dj) != dj) begin
          failures++;
          $display("FAIL d=%0d k=%0d got (%0d,%0d) expected (%0d,%0d)", d, k,
                   ofs8[k-1].di, ofs8[k-1].dj, di, dj);
        end
        if (ofs1[0] != ofs8[k-1]) failures++;
        if (d == 2 || d == 10) begin
          checks++;
          if (d == 2 && (int'(ofs8[k-1].di) != fig_d2[k-1][0] ||
                         int'(ofs8[k-1].dj) != fig_d2[k-1][1])) failures++;
          if (d == 10 && (int'(ofs8[k-1].di) != fig_d10[k-1][0] ||
                          int'(ofs8[k-1].dj) != fig_d10[k-1][1])) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
