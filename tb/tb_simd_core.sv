// tb_simd_core: drives random FP16 batches into the sixteen-lane SiLU unit and
// compares each lane with x / (1 + exp(-x)) computed in double precision.
// The tolerance covers the chord approximation of the sigmoid (< 4e-3) and
// FP16 rounding. Also checks the one-clock latency of out_valid.
module tb_simd_core;
  import vikin_pkg::*;
  import fp16_ref_pkg::*;

  logic  clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fp16_t x [NLANE], y [NLANE];
  int    checks = 0, failures = 0;

  simd_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xv, ref_y, err, tol;
    for (int i = 0; i < NLANE; i++) x[i] = FP16_ZERO;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int i = 0; i < NLANE; i++) begin
        xv = ($urandom_range(20000) / 1000.0) - 10.0;
        if (n == 0) xv = real'(i) - 8.0;  // integer grid incl. segment ends
        x[i] = r2h(xv);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("FAIL out_valid not set one clock after in_valid");
      end
      for (int i = 0; i < NLANE; i++) begin
        xv    = h2r(x[i]);
        ref_y = xv / (1.0 + $exp(-xv));
        err   = absr(h2r(y[i]) - ref_y);
        tol   = 0.0045 * absr(xv) + absr(ref_y) / 512.0 + 1e-4;
        checks++;
        if (err > tol) begin
          failures++;
          if (failures < 10) $display("FAIL silu(%f) = %f exp %f", xv, h2r(y[i]), ref_y);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin
        failures++;
        $display("FAIL out_valid stuck");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
