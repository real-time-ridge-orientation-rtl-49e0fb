// csa_tb: checks the carry save adder identity x + y + z = sum + 2*carry
// for random 8- and 10-bit operands.
module csa_tb;
  int checks = 0, failures = 0;
  logic [7:0] x8, y8, z8, s8, c8;
  logic [9:0] x10, y10, z10, s10, c10;

  csa #(.W(8))  dut8  (.x(x8),  .y(y8),  .z(z8),  .sum(s8),  .carry(c8));
  csa #(.W(10)) dut10 (.x(x10), .y(y10), .z(z10), .sum(s10), .carry(c10));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      x8 = 8'($urandom); y8 = 8'($urandom); z8 = 8'($urandom);
      x10 = 10'($urandom); y10 = 10'($urandom); z10 = 10'($urandom);
      #1;
      checks += 2;
      if (int'(x8) + int'(y8) + int'(z8) != int'(s8) + 2 * int'(c8)) failures++;
      if (int'(x10) + int'(y10) + int'(z10) != int'(s10) + 2 * int'(c10)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
