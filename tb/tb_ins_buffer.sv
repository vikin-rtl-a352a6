// tb_ins_buffer: random pushes and pops on the instruction queue against a
// software queue: order, rd_valid, and wr_ready going low at 16 entries.
module tb_ins_buffer;
  import vikin_pkg::*;

  logic   clk = 0, rst_n = 0, wr_valid = 0, wr_ready, rd_valid, rd_pop = 0;
  instr_t wr_data = '0, rd_data;
  int     checks = 0, failures = 0;

  ins_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t q [$];
    bit saw_full = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (rd_valid != (q.size() > 0) || wr_ready != (q.size() < 16) ||
          (q.size() > 0 && rd_data !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d size %0d rd_valid %0d wr_ready %0d", n, q.size(), rd_valid, wr_ready);
      end
      if (!wr_ready) saw_full = 1;
      wr_valid = ($urandom_range(99) < ((n / 500) % 2 ? 30 : 70));
      wr_data  = instr_t'({$urandom, $urandom, $urandom});
      rd_pop   = rd_valid && ($urandom_range(99) < 50);
      if (rd_pop) void'(q.pop_front());
      if (wr_valid && wr_ready) q.push_back(wr_data);
    end
    checks++;
    if (!saw_full) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
