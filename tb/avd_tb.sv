// avd_tb: checks the absolute-value-of-difference block for every pair of
// 8-bit grey levels.
module avd_tb;
  int checks = 0, failures = 0;
  logic [7:0] f, fd, d;

  avd dut (.f(f), .fd(fd), .d(d));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++) begin
        int e;
        f = 8'(x); fd = 8'(y);
        #1;
        e = (x > y) ? x - y : y - x;
        checks++;
        if (int'(d) != e) begin
          failures++;
          if (failures < 10) $display("FAIL |%0d-%0d| got %0d", x, y, d);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
