// tb_tse_slice: feeds one encoder slice random sparse streams under random
// pattern masks and checks the dense scratchpads against a queue model:
// element n of a stream is kept, at offset n, iff it is non-zero and
// (mask off or mask[n % 4]). Bypass writes are always kept. Also checks the
// entry count, the 16-entry limit with its overflow flag, and clear.
module tb_tse_slice;
  import vikin_pkg::*;

  logic             clk = 0, rst_n = 0, clr = 0;
  logic [3:0]       mask = 0;
  logic             mask_en = 0, in_valid = 0, byp_valid = 0;
  fp16_t            in_data = 0, byp_data = 0, rd_data;
  logic [OFF_W-1:0] byp_off = 0, rd_off;
  logic [3:0]       rd_addr = 0;
  logic [4:0]       count;
  logic             overflow;
  int               checks = 0, failures = 0;

  tse_slice dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t            qd [$];
    logic [OFF_W-1:0] qo [$];
    int               len, n;
    bit               exp_ovf;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      clr = 1;
      mask = 4'($urandom);
      mask_en = (t % 3 != 0);
      if (t == 1) begin mask = 4'b0101; mask_en = 1; end  // the "1 0 1 0" pattern
      @(negedge clk);
      clr = 0;
      qd.delete(); qo.delete();
      exp_ovf = 0;
      len = $urandom_range(24);
      n = 0;
      for (int e = 0; e < len; e++) begin
        if ($urandom_range(9) == 0) begin
          byp_valid = 1;
          byp_data  = {1'b0, 5'($urandom_range(29) + 1), 10'($urandom)};
          byp_off   = 5'($urandom);
          if (qd.size() < 16) begin qd.push_back(byp_data); qo.push_back(byp_off); end
          else exp_ovf = 1;
        end else begin
          in_valid = 1;
          in_data  = ($urandom_range(2) == 0) ? {1'($urandom), 15'd0}
                                              : {1'($urandom), 5'($urandom_range(29) + 1), 10'($urandom)};
          if (in_data[14:0] != 0 && (!mask_en || mask[n % 4])) begin
            if (qd.size() < 16) begin qd.push_back(in_data); qo.push_back(5'(n)); end
            else exp_ovf = 1;
          end
          n++;
        end
        @(negedge clk);
        in_valid = 0; byp_valid = 0;
      end
      checks++;
      if (int'(count) != qd.size() || overflow != exp_ovf) begin
        failures++;
        $display("FAIL count %0d exp %0d ovf %0d exp %0d", count, qd.size(), overflow, exp_ovf);
      end
      for (int i = 0; i < qd.size(); i++) begin
        rd_addr = 4'(i);
        #1;
        checks++;
        if (rd_data !== qd[i] || rd_off !== qo[i]) begin
          failures++;
          if (failures < 10) $display("FAIL entry %0d: %h/%0d exp %h/%0d", i, rd_data, rd_off, qd[i], qo[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
