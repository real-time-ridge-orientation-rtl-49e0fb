// ij_generator_tb: checks the pixel scan of a 32 x 32 image (four 16 x 16
// blocks): after start every advance yields the next pixel, block by block,
// row by row, j fastest; valid drops after the last pixel, a start while
// running is ignored, and a new start begins again at (0, 0).
module ij_generator_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, adv = 0;
  logic [4:0] i, j;
  logic valid;

  ij_generator #(.COORD_W(5)) dut (.clk(clk), .rst_n(rst_n), .start(start),
                                   .adv(adv), .i(i), .j(j), .valid(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++; if (valid) failures++;
    for (int pass = 0; pass < 2; pass++) begin
      start <= 1; @(posedge clk); start <= 0;
      for (int b = 0; b < 4; b++)
        for (int pi = 0; pi < 16; pi++)
          for (int pj = 0; pj < 16; pj++) begin
            #1;
            checks++;
            if (!valid || int'(i) != (b / 2) * 16 + pi || int'(j) != (b % 2) * 16 + pj) begin
              failures++;
              if (failures < 10) $display("FAIL got (%0d,%0d) v=%0d", i, j, valid);
            end
            // a start in the middle must not restart the scan
            if (b == 1 && pi == 3 && pj == 3) start <= 1;
            adv <= 1; @(posedge clk); adv <= 0; start <= 0;
            if (pj % 5 == 0) @(posedge clk);  // advance is not every clock
          end
      #1;
      checks++; if (valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
