// cla_adder_tb: checks the carry lookahead adder against integer addition,
// exhaustively at 8 bits (all a, b, cin) and randomly at 10 bits.
module cla_adder_tb;
  int checks = 0, failures = 0;
  logic [7:0] a8, b8, s8;
  logic       ci8, co8;
  logic [9:0] a10, b10, s10;
  logic       ci10, co10;

  cla_adder #(.W(8))  dut8  (.a(a8),  .b(b8),  .cin(ci8),  .sum(s8),  .cout(co8));
  cla_adder #(.W(10)) dut10 (.a(a10), .b(b10), .cin(ci10), .sum(s10), .cout(co10));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++)
        for (int c = 0; c < 2; c++) begin
          a8 = 8'(x); b8 = 8'(y); ci8 = 1'(c);
          #1;
          checks++;
          if ({co8, s8} != 9'(x + y + c)) begin
            failures++;
            if (failures < 10) $display("FAIL 8b %0d+%0d+%0d = %0d", x, y, c, {co8, s8});
          end
        end
    for (int n = 0; n < 5000; n++) begin
      a10 = 10'($urandom); b10 = 10'($urandom); ci10 = 1'($urandom);
      #1;
      checks++;
      if ({co10, s10} != 11'(int'(a10) + int'(b10) + int'(ci10))) begin
        failures++;
        if (failures < 10) $display("FAIL 10b %0d+%0d", a10, b10);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
