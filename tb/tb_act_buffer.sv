// tb_act_buffer: random host writes, lane-masked core writes (with host/core
// collisions, where the core must win) and reads against a software copy of
// the 64-word buffer; reads return data one clock after rd_en.
module tb_act_buffer;
  import vikin_pkg::*;

  logic             clk = 0, h_we = 0, c_we = 0, rd_en = 0;
  logic [5:0]       h_addr = 0, c_addr = 0, rd_addr = 0;
  logic [NLANE-1:0] c_lane_en = 0;
  fp16_t            h_wdata [NLANE], c_wdata [NLANE], rd_data [NLANE];
  int               checks = 0, failures = 0;

  act_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t model [64][NLANE];
    fp16_t expd [NLANE];
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      h_we = 1; h_addr = 6'(a);
      for (int i = 0; i < NLANE; i++) begin h_wdata[i] = 16'($urandom); model[a][i] = h_wdata[i]; end
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      h_we = 1'($urandom); h_addr = 6'($urandom);
      c_we = 1'($urandom); c_addr = ($urandom_range(3) == 0) ? h_addr : 6'($urandom);
      c_lane_en = 16'($urandom);
      rd_en = 1; rd_addr = 6'($urandom);
      for (int i = 0; i < NLANE; i++) begin
        h_wdata[i] = 16'($urandom); c_wdata[i] = 16'($urandom);
        expd[i] = model[rd_addr][i];
      end
      for (int i = 0; i < NLANE; i++) begin
        if (c_we && c_lane_en[i]) model[c_addr][i] = c_wdata[i];
        else if (h_we && !(c_we && c_addr == h_addr)) model[h_addr][i] = h_wdata[i];
      end
      @(negedge clk);
      h_we = 0; c_we = 0; rd_en = 0;
      for (int i = 0; i < NLANE; i++) begin
        checks++;
        if (rd_data[i] !== expd[i]) begin
          failures++;
          if (failures < 10) $display("FAIL read lane %0d got %h exp %h", i, rd_data[i], expd[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
