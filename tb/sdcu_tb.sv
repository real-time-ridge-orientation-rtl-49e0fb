// sdcu_tb: checks the S_d calculation unit, sum of eight absolute
// differences, on random pixels and on the extremes (all differences 255,
// giving the largest value 2040, and all zero).
module sdcu_tb;
  int checks = 0, failures = 0;
  logic [7:0]  f;
  logic [7:0]  fd [8];
  logic [10:0] sd;

  sdcu dut (.f(f), .fd(fd), .sd(sd));

  task automatic check();
    int e = 0;
    for (int k = 0; k < 8; k++) e += (f > fd[k]) ? f - fd[k] : fd[k] - f;
    #1;
    checks++;
    if (int'(sd) != e) begin
      failures++;
      if (failures < 10) $display("FAIL sd=%0d expected %0d", sd, e);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f = 8'd0;   for (int k = 0; k < 8; k++) fd[k] = 8'd255; check();
    f = 8'd255; for (int k = 0; k < 8; k++) fd[k] = 8'd0;   check();
    f = 8'd77;  for (int k = 0; k < 8; k++) fd[k] = 8'd77;  check();
    for (int n = 0; n < 20000; n++) begin
      f = 8'($urandom);
      for (int k = 0; k < 8; k++) fd[k] = 8'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
