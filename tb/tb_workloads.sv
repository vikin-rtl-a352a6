// tb_workloads: the core on batches of the layer sizes of the original
// evaluation, at the default sizes of every block.
//
// Each case computes one complete output batch of a layer and compares it with
// a double-precision reference (exact silu, Cox-de Boor B-splines), allowing
// for FP16 rounding and the SIMD core's sigmoid approximation:
//   1. KAN layer [72 -> 96], G=4, K=3: one batch of 16 outputs over 72 inputs
//      (five input words, the last half padded with zero weights), with the
//      "1 0 1 0" pattern mask (50 % pattern sparsity), in one instruction.
//   2. the same layer at G=16, K=3: one batch needs 5*8*20 = 800 weight words
//      per bank pair, more than the 512 there are, so it runs as two
//      instructions (words 0-2, then 3-4) with a weight reload in between; the
//      second leaves the accumulators uncleared.
//   3. MLP layer [72 -> 304]: one batch of 32 outputs over five words, ReLU.
//   4. MLP layer [304 -> 96]: one batch of 32 outputs over 19 words, split as
//      16 + 3 words, with a 75 % keep mask (25 % pattern sparsity); the mask
//      follows the word position within each instruction.
// The cycle count of each instruction is printed; the KAN one is checked
// against the sum of its stage lengths (SPU time of the first batch, then the
// longer of SPU and encoder time per batch).
module tb_workloads;
  import vikin_pkg::*;
  import fp16_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       ins_wr_valid = 0, ins_wr_ready;
  instr_t     ins_wr_data = '0;
  logic       h_ib_we = 0, h_ib_rd_en = 0, h_ob_rd_en = 0, h_wb_we = 0;
  logic [5:0] h_ib_addr = 0, h_ob_addr = 0;
  logic [1:0] h_wb_bank = 0;
  logic [7:0] h_wb_addr = 0;
  fp16_t      h_ib_wdata [NLANE], h_wb_wdata [NLANE], ib_rd_data [NLANE], ob_rd_data [NLANE];
  logic       busy, instr_done, tse_overflow, s1_stall;

  vikin_top dut (.*);

  always #5 clk = ~clk;

  int     checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host tasks ----------------
  task automatic ib_write(input int addr, input real v [NLANE]);
    @(negedge clk);
    h_ib_we = 1; h_ib_addr = 6'(addr);
    for (int i = 0; i < NLANE; i++) h_ib_wdata[i] = r2h(v[i]);
    @(negedge clk);
    h_ib_we = 0;
  endtask

  task automatic wb_write(input int bank, input int addr, input fp16_t w [NLANE]);
    @(negedge clk);
    h_wb_we = 1; h_wb_bank = 2'(bank); h_wb_addr = 8'(addr); h_wb_wdata = w;
    @(negedge clk);
    h_wb_we = 0;
  endtask

  // Push one instruction, wait for it, return the clocks it took.
  task automatic run(input instr_t ins, output longint clocks);
    longint t0;
    @(negedge clk);
    ins_wr_valid = 1; ins_wr_data = ins;
    t0 = cycle;
    @(negedge clk);
    ins_wr_valid = 0;
    while (!instr_done) @(negedge clk);
    clocks = cycle - t0;
  endtask

  task automatic ob_read(input int addr, output fp16_t d [NLANE]);
    @(negedge clk);
    h_ob_rd_en = 1; h_ob_addr = 6'(addr);
    @(negedge clk);
    h_ob_rd_en = 0;
    d = ob_rd_data;
  endtask

  task automatic ib_read(input int addr, output fp16_t d [NLANE]);
    @(negedge clk);
    h_ib_rd_en = 1; h_ib_addr = 6'(addr);
    @(negedge clk);
    h_ib_rd_en = 0;
    d = ib_rd_data;
  endtask

  task automatic expect_close(input string what, input fp16_t got, input real want, input real tol);
    checks++;
    if (absr(h2r(got) - want) > tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %f expected %f (tol %f)", what, h2r(got), want, tol);
    end
  endtask

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

  // SPU busy clocks for one input (see the B-spline unit).
  function automatic int spu_clocks(input int G, input int K);
    int n = G + 2*K + 1;
    for (int k = 1; k <= K; k++) n += (G + 2*K - k) * ((k == 3) ? 2 : 1);
    return n;
  endfunction

  // ---------------- KAN batch: 16 outputs over NIN inputs ----------------
  // split: number of input words per instruction (the last takes the rest).
  task automatic kan_batch(input string name, input int gc, input int kc, input int nin,
                           input bit mask_en, input logic [3:0] mask, input int split);
    int     G, K, pitch, nw, a, bank, w0, w1, dense, maxd;
    real    x [80];
    real    wt [16][80][20];
    real    want [16], mag [16], row [NLANE];
    fp16_t  w [NLANE], got [NLANE];
    instr_t ins;
    longint clocks, total, model;
    G = 2 << gc; K = kc + 1; pitch = G + K + 1; nw = (nin + 15) / 16;
    for (int p = 0; p < nw * 16; p++)
      x[p] = (p < nin) ? h2r(r2h(($urandom_range(2000) / 1000.0) - 1.0)) : 0.0;
    for (int b = 0; b < nw; b++) begin
      for (int i = 0; i < NLANE; i++) row[i] = x[b*16 + i];
      ib_write(b, row);
    end
    for (int q = 0; q < 16; q++)
      for (int p = 0; p < nw * 16; p++)
        for (int o = 0; o < pitch; o++)
          wt[q][p][o] = (p < nin) ? h2r(r2h(($urandom_range(1000) / 1000.0) - 0.5)) : 0.0;
    for (int q = 0; q < 16; q++) begin
      want[q] = 0.0; mag[q] = 0.0;
      for (int p = 0; p < nin; p++) begin
        want[q] += wt[q][p][G+K] * x[p] / (1.0 + $exp(-x[p]));
        mag[q]  += absr(wt[q][p][G+K] * x[p]);
        for (int i = 0; i < G + K; i++)
          if (!mask_en || mask[i % 4]) begin
            want[q] += wt[q][p][i] * bspline(G, K, i, x[p]);
            mag[q]  += absr(wt[q][p][i] * bspline(G, K, i, x[p]));
          end
      end
    end
    total = 0;
    model = 0;
    w0 = 0;
    while (w0 < nw) begin
      w1 = (w0 + split < nw) ? w0 + split : nw;
      // weights of words w0..w1-1 from word 0 of each bank pair
      for (int b = w0; b < w1; b++)
        for (int g = 0; g < 2; g++)
          for (int s = 0; s < 8; s++)
            for (int o = 0; o < pitch; o++) begin
              a = (b - w0)*8*pitch + s*pitch + o;
              bank = 2*g + a / 256;
              for (int q = 0; q < 16; q++) w[q] = r2h(wt[q][b*16 + g*8 + s][o]);
              wb_write(bank, a % 256, w);
            end
      ins = '0;
      ins.op = OP_KAN; ins.g_code = 2'(gc); ins.k_code = 2'(kc);
      ins.mask = mask; ins.mask_en = mask_en; ins.clr = (w0 == 0); ins.wb = (w1 == nw);
      ins.in_base = 6'(w0); ins.n_words = 5'(w1 - w0 - 1); ins.w_base = 0; ins.out_addr = 6'd0;
      run(ins, clocks);
      total += clocks;
      // lower bound from the two stages: SPU time per word, encoder drain per word
      for (int b = w0; b < w1; b++) begin
        maxd = 0;
        for (int g = 0; g < 2; g++) begin
          dense = 0;
          for (int s = 0; s < 8; s++) begin
            dense++;  // silu entry
            for (int i = 0; i < G + K; i++)
              if (bspline(G, K, i, h2r(r2h(x[b*16 + g*8 + s]))) != 0.0 && (!mask_en || mask[i % 4]))
                dense++;
          end
          if (dense > maxd) maxd = dense;
        end
        model += (b == w0) ? spu_clocks(G, K) : ((spu_clocks(G, K) > maxd) ? spu_clocks(G, K) : maxd);
        if (b == w1 - 1) model += maxd;
      end
      w0 = w1;
    end
    ob_read(0, got);
    for (int q = 0; q < 16; q++)
      expect_close($sformatf("%s out %0d", name, q), got[q], want[q], 0.006 * mag[q] + 0.01);
    // the pipelined schedule should stay within 25 % (+ fixed overhead) of the stage model
    checks++;
    if (total < model || total > model + model / 4 + 16 * nw) begin
      failures++;
      $display("FAIL %s: %0d clocks, stage model %0d", name, total, model);
    end
    $display("%s: %0d clocks in %0d instruction(s), stage model %0d", name, total,
             (nw + split - 1) / split, model);
  endtask

  // ---------------- MLP batch: 32 outputs over NWORDS input words ----------------
  task automatic mlp_batch(input string name, input int nwords, input int ib_base,
                           input bit mask_en, input logic [3:0] mask, input int split);
    fp16_t  xin [19][NLANE], w [NLANE], got [NLANE];
    real    wt [32][304], want [32], mag [32], acc, row [NLANE];
    instr_t ins;
    int     w0, w1;
    longint clocks, total;
    for (int wd = 0; wd < nwords; wd++) begin
      for (int i = 0; i < NLANE; i++)
        row[i] = ($urandom_range(3) == 0) ? 0.0 : ($urandom_range(2000) / 1000.0) - 1.0;
      ib_write(ib_base + wd, row);
      ib_read(ib_base + wd, xin[wd]);
    end
    for (int q = 0; q < 32; q++)
      for (int n = 0; n < nwords * 16; n++)
        wt[q][n] = h2r(r2h(($urandom_range(1000) / 1000.0) - 0.5));
    for (int q = 0; q < 32; q++) begin
      acc = 0.0; mag[q] = 0.0;
      for (int wd = 0; wd < nwords; wd++)
        if (!mask_en || mask[(wd % split) % 4])
          for (int l = 0; l < 16; l++) begin
            acc    += wt[q][wd*16 + l] * h2r(xin[wd][l]);
            mag[q] += absr(wt[q][wd*16 + l] * h2r(xin[wd][l]));
          end
      want[q] = acc > 0.0 ? acc : 0.0;
    end
    total = 0;
    w0 = 0;
    while (w0 < nwords) begin
      w1 = (w0 + split < nwords) ? w0 + split : nwords;
      for (int wd = w0; wd < w1; wd++)
        for (int g = 0; g < 2; g++)
          for (int s = 0; s < 8; s++) begin
            for (int q = 0; q < 16; q++) w[q] = r2h(wt[q][wd*16 + g*8 + s]);
            wb_write(g, (wd - w0)*8 + s, w);
            for (int q = 0; q < 16; q++) w[q] = r2h(wt[16 + q][wd*16 + g*8 + s]);
            wb_write(g + 2, (wd - w0)*8 + s, w);
          end
      ins = '0;
      ins.op = OP_MLP; ins.mask = mask; ins.mask_en = mask_en; ins.relu = 1;
      ins.clr = (w0 == 0); ins.wb = (w1 == nwords);
      ins.in_base = 6'(ib_base + w0); ins.n_words = 5'(w1 - w0 - 1);
      ins.w_base = 0; ins.out_addr = 6'd1; ins.spu_addr = 6'd63;
      run(ins, clocks);
      total += clocks;
      checks++;
      if (tse_overflow) begin failures++; $display("FAIL %s: encoder overflow", name); end
      w0 = w1;
    end
    ob_read(1, got);
    for (int q = 0; q < 16; q++)
      expect_close($sformatf("%s PE out %0d", name, q), got[q], want[q], 0.004 * mag[q] + 0.01);
    ib_read(63, got);
    for (int q = 0; q < 16; q++)
      expect_close($sformatf("%s SPU out %0d", name, q), got[q], want[16 + q], 0.004 * mag[16 + q] + 0.01);
    $display("%s: %0d clocks", name, total);
  endtask

  initial begin
    for (int i = 0; i < NLANE; i++) begin h_ib_wdata[i] = 0; h_wb_wdata[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    kan_batch("KAN [72,96] G=4 K=3 mask 1010", 1, 2, 72, 1, 4'b0101, 5);
    kan_batch("KAN [72,96] G=16 K=3", 3, 2, 72, 0, 4'b0000, 3);
    mlp_batch("MLP [72,304]", 5, 10, 0, 4'b0000, 16);
    mlp_batch("MLP [304,96] 25% pattern", 19, 20, 1, 4'b0111, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
