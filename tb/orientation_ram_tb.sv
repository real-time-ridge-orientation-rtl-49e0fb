// orientation_ram_tb: writes all 256 four-bit entries, overwrites some,
// and reads everything back.
module orientation_ram_tb;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [7:0] waddr, raddr;
  logic [3:0] wdata, rdata;
  logic [3:0] model [256];

  orientation_ram dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                       .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      we <= 1; waddr <= 8'(a); wdata <= 4'(a * 7); model[a] = 4'(a * 7);
      @(posedge clk);
    end
    for (int n = 0; n < 100; n++) begin
      int a;
      logic [3:0] v;
      a = $urandom % 256;
      v = 4'($urandom);
      we <= 1; waddr <= 8'(a); wdata <= v; model[a] = v;
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    for (int a = 0; a < 256; a++) begin
      raddr = 8'(a);
      #1;
      checks++;
      if (rdata != model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
