// tb_spu: checks the B-spline unit in both modes.
//
// Iterative mode: for every G in {2,4,8,16} and K in {1,2,3,4} and many
// inputs x (random, on knots, outside [-1,1]) the G+K bases of order K must
// match the Cox-de Boor recursion evaluated in double precision on the same
// extended uniform grid, within FP16 rounding. The indices must come out in
// order, and with out_ready high the unit must be busy for exactly
//   (G+2K+1) + sum_{k=1..K} (G+2K-k) * (k == 3 ? 2 : 1)  clocks.
// Some runs hold out_ready low to check that the unit waits before its final
// order. Accumulate mode: a random MAC sequence against a reference that
// rounds to FP16 after every operation, as the hardware does.
module tb_spu;
  import vikin_pkg::*;
  import fp16_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic [1:0] cfg_g_code = 0, cfg_k_code = 0;
  logic       start = 0, out_ready = 1, busy, b_valid;
  fp16_t      x = 0, b_data;
  logic [4:0] b_idx;
  logic       acc_clr = 0, acc_en = 0;
  fp16_t      a0 = 0, w0 = 0, a1 = 0, w1 = 0, sum;
  int         checks = 0, failures = 0;

  spu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real bspline(input int G, input int K, input int i, input real xv);
    real h, t[32], b[32];
    h = 2.0 / G;
    for (int j = 0; j <= G + 2*K; j++) t[j] = -1.0 + (j - K) * h;
    for (int j = 0; j < G + 2*K; j++) b[j] = (xv >= t[j] && xv < t[j+1]) ? 1.0 : 0.0;
    for (int k = 1; k <= K; k++)
      for (int j = 0; j < G + 2*K - k; j++)
        b[j] = (xv - t[j]) / (t[j+k] - t[j]) * b[j] + (t[j+k+1] - xv) / (t[j+k+1] - t[j+1]) * b[j+1];
    return b[i];
  endfunction

  task automatic run_one(input int gc, input int kc, input real xv, input bit stall);
    int G, K, nout, cyc, exp_cyc;
    real got, want;
    G = 2 << gc; K = kc + 1;
    exp_cyc = G + 2*K + 1;
    for (int k = 1; k <= K; k++) exp_cyc += (G + 2*K - k) * ((k == 3) ? 2 : 1);
    @(negedge clk);
    cfg_g_code = 2'(gc); cfg_k_code = 2'(kc); x = r2h(xv); start = 1;
    out_ready = !stall;
    @(negedge clk);
    start = 0;
    nout = 0; cyc = 0;
    while (busy || b_valid) begin
      if (busy) cyc++;
      if (stall && cyc == exp_cyc + 5) out_ready = 1;
      if (b_valid) begin
        got  = h2r(b_data);
        want = bspline(G, K, nout, h2r(x));
        checks++;
        if (int'(b_idx) != nout || absr(got - want) > 4e-3) begin
          failures++;
          if (failures < 10)
            $display("FAIL G=%0d K=%0d x=%f i=%0d idx=%0d got %f exp %f", G, K, h2r(x), nout, b_idx, got, want);
        end
        nout++;
      end
      if (b_valid && !out_ready) begin
        failures++;
        $display("FAIL output while out_ready low");
      end
      @(negedge clk);
    end
    checks++;
    if (nout != G + K) begin
      failures++;
      $display("FAIL G=%0d K=%0d: %0d bases, expected %0d", G, K, nout, G + K);
    end
    checks++;
    if (!stall && cyc != exp_cyc) begin
      failures++;
      $display("FAIL G=%0d K=%0d: busy %0d clocks, expected %0d", G, K, cyc, exp_cyc);
    end
    if (stall && cyc <= exp_cyc) begin
      failures++;
      $display("FAIL stall had no effect");
    end
    out_ready = 1;
  endtask

  initial begin
    real acc_ref;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int gc = 0; gc < 4; gc++)
      for (int kc = 0; kc < 4; kc++) begin
        run_one(gc, kc, 0.0, 0);
        run_one(gc, kc, -1.0, 0);
        run_one(gc, kc, 2.0 / (2 << gc), 0);      // on a knot
        run_one(gc, kc, 1.1, 0);                  // in the extension
        for (int n = 0; n < 12; n++)
          run_one(gc, kc, ($urandom_range(2000) / 1000.0) - 1.0, n == 0);
      end
    // accumulate mode
    @(negedge clk);
    acc_clr = 1;
    @(negedge clk);
    acc_clr = 0;
    acc_ref = 0.0;
    for (int n = 0; n < 300; n++) begin
      a0 = rand_h(-3, 1); w0 = rand_h(-3, 1); a1 = rand_h(-3, 1); w1 = rand_h(-3, 1);
      acc_en = ($urandom_range(3) != 0);
      if (acc_en)
        acc_ref = h2r(r2h(acc_ref + h2r(r2h(h2r(r2h(h2r(a0) * h2r(w0))) + h2r(r2h(h2r(a1) * h2r(w1)))))));
      @(negedge clk);
      checks++;
      if (sum !== r2h(acc_ref)) begin
        failures++;
        if (failures < 10) $display("FAIL acc got %h exp %h", sum, r2h(acc_ref));
      end
    end
    acc_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
