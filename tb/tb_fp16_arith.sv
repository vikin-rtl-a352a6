// tb_fp16_arith: checks the FP16 adder, multiplier and helpers of vikin_pkg
// against double-precision references rounded to FP16. Sums and products of
// two FP16 values are exact in double, so the reference after rounding must
// match the design bit for bit.
module tb_fp16_arith;
  import vikin_pkg::*;
  import fp16_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic chk(input string what, input logic [15:0] got, input logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    logic [15:0] a, b;
    for (int n = 0; n < 20000; n++) begin
      a = rand_h(-6, 6);
      b = (n % 4 == 0) ? {~a[15], a[14:10], 10'($urandom)} : rand_h(-6, 6);
      chk("add", fp16_add(a, b), r2h(h2r(a) + h2r(b)));
      chk("mul", fp16_mul(a, b), r2h(h2r(a) * h2r(b)));
    end
    chk("add0", fp16_add(16'h3c00, 16'hbc00), 16'h0000);
    chk("scale", fp16_scale2(16'h3c00, -3), 16'h3000);
    for (int n = -40; n < 40; n++)
      for (int sh = -4; sh <= 0; sh++)
        chk("from_int", fp16_from_int(n, sh), r2h(real'(n) * p2(sh)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
