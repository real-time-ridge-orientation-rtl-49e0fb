// switch_elem_tb: checks the Minimum (15-bit {index, S_d}) and Maximum
// (8-bit count) switch elements on random and tied values; a tie must pass
// input a.
module switch_elem_tb;
  int checks = 0, failures = 0;
  logic [3:0]  ai, bi, yi_min, yi_max;
  logic [10:0] av, bv, yv_min;
  logic [7:0]  ac, bc, yc_max;

  switch_elem #(.IDX_W(4), .VAL_W(11), .FIND_MAX(1'b0)) dut_min (
    .a_idx(ai), .a_val(av), .b_idx(bi), .b_val(bv), .y_idx(yi_min), .y_val(yv_min));
  switch_elem #(.IDX_W(4), .VAL_W(8), .FIND_MAX(1'b1)) dut_max (
    .a_idx(ai), .a_val(ac), .b_idx(bi), .b_val(bc), .y_idx(yi_max), .y_val(yc_max));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      ai = 4'($urandom); bi = 4'($urandom);
      av = 11'($urandom); bv = (n % 4 == 0) ? av : 11'($urandom);
      ac = 8'($urandom);  bc = (n % 4 == 1) ? ac : 8'($urandom);
      #1;
      checks += 2;
      if (bv < av ? (yi_min != bi || yv_min != bv) : (yi_min != ai || yv_min != av))
        failures++;
      if (bc > ac ? (yi_max != bi || yc_max != bc) : (yi_max != ai || yc_max != ac))
        failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
