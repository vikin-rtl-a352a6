// tb_pe_array: random share-bus values and per-PE weights into the sixteen
// PEs, with random enables and clears; each accumulator is compared every
// clock with a reference that rounds every product and sum to FP16 in double
// precision, in the hardware's order (a0*w0 + a1*w1, then into the sum).
module tb_pe_array;
  import vikin_pkg::*;
  import fp16_ref_pkg::*;

  logic  clk = 0, rst_n = 0, acc_clr = 0, acc_en = 0;
  fp16_t a0 = 0, a1 = 0, w0 [NLANE], w1 [NLANE], acc [NLANE];
  int    checks = 0, failures = 0;

  pe_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r [NLANE];
    for (int i = 0; i < NLANE; i++) begin w0[i] = 0; w1[i] = 0; r[i] = 0.0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      acc_clr = ($urandom_range(99) == 0);
      acc_en  = ($urandom_range(3) != 0);
      a0 = ($urandom_range(4) == 0) ? 16'h0 : rand_h(-3, 2);
      a1 = ($urandom_range(4) == 0) ? 16'h0 : rand_h(-3, 2);
      for (int i = 0; i < NLANE; i++) begin w0[i] = rand_h(-4, 1); w1[i] = rand_h(-4, 1); end
      for (int i = 0; i < NLANE; i++)
        if (acc_clr) r[i] = 0.0;
        else if (acc_en)
          r[i] = h2r(r2h(r[i] + h2r(r2h(h2r(r2h(h2r(a0) * h2r(w0[i]))) + h2r(r2h(h2r(a1) * h2r(w1[i])))))));
      @(negedge clk);
      acc_en = 0; acc_clr = 0;
      for (int i = 0; i < NLANE; i++) begin
        checks++;
        if (acc[i] !== r2h(r[i])) begin
          failures++;
          if (failures < 10) $display("FAIL pe %0d got %h exp %h", i, acc[i], r2h(r[i]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
