// tb_tse: fills the sixteen encoder slices with random sparse streams (some
// slices left empty) plus one bypass value each, then starts the drain and
// checks, clock by clock, that each group presents its kept entries in slice
// order and entry order, with the right offset and slice number, and that the
// drain lasts max(entries of group 0, entries of group 1) clocks.
module tb_tse;
  import vikin_pkg::*;

  logic             clk = 0, rst_n = 0, clr = 0;
  logic [3:0]       mask = 0;
  logic             mask_en = 0;
  logic             in_valid [NLANE];
  fp16_t            in_data  [NLANE];
  logic             byp_valid = 0;
  fp16_t            byp_data [NLANE];
  logic [OFF_W-1:0] byp_off = 0;
  logic             rd_start = 0, rd_busy;
  logic             grp_valid [2];
  fp16_t            grp_data  [2];
  logic [OFF_W-1:0] grp_off   [2];
  logic [2:0]       grp_slice [2];
  logic             overflow;
  int               checks = 0, failures = 0;

  tse dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { fp16_t d; logic [4:0] o; logic [2:0] s; } ent_t;

  initial begin
    ent_t q [2][$];
    fp16_t v;
    int cyc, maxlen;
    bit use_byp;
    for (int i = 0; i < NLANE; i++) begin in_valid[i] = 0; in_data[i] = 0; byp_data[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      fp16_t       lane_q [NLANE][$];
      logic [4:0]  lane_o [NLANE][$];
      for (int i = 0; i < NLANE; i++) begin lane_q[i].delete(); lane_o[i].delete(); end
      @(negedge clk);
      clr = 1; mask = 4'($urandom); mask_en = 1'($urandom);
      use_byp = 1'($urandom);
      @(negedge clk);
      clr = 0;
      if (use_byp) begin
        byp_valid = 1; byp_off = 5'($urandom);
        for (int i = 0; i < NLANE; i++) begin
          byp_data[i] = {1'b0, 5'($urandom_range(29) + 1), 10'($urandom)};
          lane_q[i].push_back(byp_data[i]); lane_o[i].push_back(byp_off);
        end
        @(negedge clk);
        byp_valid = 0;
      end
      for (int n = 0; n < 12; n++) begin
        for (int i = 0; i < NLANE; i++) begin
          in_valid[i] = 1;
          // lanes 3 and 12 carry only zeros in even trials
          v = ($urandom_range(3) == 0 || ((i == 3 || i == 12) && t % 2 == 0)) ? 16'h0000
              : {1'($urandom), 5'($urandom_range(29) + 1), 10'($urandom)};
          in_data[i] = v;
          if (v[14:0] != 0 && (!mask_en || mask[n % 4])) begin
            lane_q[i].push_back(v); lane_o[i].push_back(5'(n));
          end
        end
        @(negedge clk);
      end
      for (int i = 0; i < NLANE; i++) in_valid[i] = 0;
      q[0].delete(); q[1].delete();
      for (int i = 0; i < NLANE; i++)
        for (int e = 0; e < lane_q[i].size(); e++)
          q[i / 8].push_back('{lane_q[i][e], lane_o[i][e], 3'(i % 8)});
      maxlen = (q[0].size() > q[1].size()) ? q[0].size() : q[1].size();
      rd_start = 1;
      @(negedge clk);
      rd_start = 0;
      cyc = 0;
      while (rd_busy) begin
        for (int g = 0; g < 2; g++) begin
          checks++;
          if (cyc < q[g].size()) begin
            if (!grp_valid[g] || grp_data[g] !== q[g][cyc].d || grp_off[g] !== q[g][cyc].o
                || grp_slice[g] !== q[g][cyc].s) begin
              failures++;
              if (failures < 10)
                $display("FAIL t=%0d g=%0d cyc=%0d got %0d %h/%0d/%0d exp %h/%0d/%0d", t, g, cyc,
                         grp_valid[g], grp_data[g], grp_off[g], grp_slice[g],
                         q[g][cyc].d, q[g][cyc].o, q[g][cyc].s);
            end
          end else if (grp_valid[g]) begin
            failures++;
            $display("FAIL group %0d valid beyond its entries", g);
          end
        end
        cyc++;
        @(negedge clk);
      end
      checks++;
      if (cyc != maxlen) begin
        failures++;
        $display("FAIL drain took %0d clocks, expected %0d", cyc, maxlen);
      end
      checks++;
      if (overflow) begin failures++; $display("FAIL overflow"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
