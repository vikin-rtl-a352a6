// tb_relu_unit: random FP16 lanes through the ReLU with en high (negatives
// and -0 become +0, the rest pass) and with en low (everything passes).
module tb_relu_unit;
  import vikin_pkg::*;

  logic  en = 0;
  fp16_t d [NLANE], q [NLANE];
  int    checks = 0, failures = 0;

  relu_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      en = 1'($urandom);
      for (int i = 0; i < NLANE; i++) d[i] = 16'($urandom);
      d[0] = 16'h8000;
      #1;
      for (int i = 0; i < NLANE; i++) begin
        checks++;
        if (q[i] !== ((en && d[i][15]) ? 16'h0000 : d[i])) begin
          failures++;
          if (failures < 10) $display("FAIL en=%0d d=%h q=%h", en, d[i], q[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
