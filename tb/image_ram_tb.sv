// image_ram_tb: writes a full 64 KB image with a known pattern and reads it
// back through both read ports at random addresses.
module image_ram_tb;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [15:0] waddr, ra, rb;
  logic [7:0]  wdata, da, db;

  image_ram dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                 .ra_addr(ra), .ra_data(da), .rb_addr(rb), .rb_data(db));

  function automatic logic [7:0] pat(input int a);
    return 8'((a * 37) ^ (a >> 8) ^ 8'h5a);
  endfunction

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 65536; a++) begin
      we <= 1; waddr <= 16'(a); wdata <= pat(a);
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    for (int n = 0; n < 5000; n++) begin
      ra = 16'($urandom); rb = 16'($urandom);
      #1;
      checks += 2;
      if (da != pat(int'(ra))) failures++;
      if (db != pat(int'(rb))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
