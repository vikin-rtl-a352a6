// tb_vikin_top: end-to-end test of the accelerator at its default sizes.
//
// The testbench plays host and global buffer: it writes inputs and weights,
// pushes instructions, waits for them and reads the results back. Reference
// results are computed here in double precision (exact silu, Cox-de Boor
// B-splines), so the comparison allows for FP16 rounding and for the SIMD
// core's sigmoid approximation.
//
// Sequence:
//   1. KAN layer [32 -> 16], G=4, K=3, pattern mask off (two input batches)
//   2. KAN layer [32 -> 16], G=4, K=3, mask "1 0 1 0" (50 % pattern sparsity)
//   3. KAN layer [16 -> 16], G=2, K=1 (short SPU work: stage 1 must wait)
//   4. KAN layer [16 -> 16], G=16, K=4
//   5. aggregation of result 1 into the input buffer, then an MLP layer
//      [48 -> 32] with ReLU in parallel mode (PE array + SPU array), mask off
//   6. the same MLP with a 75 % keep mask (pattern sparsity 25 %)
//   7. a KAN layer [16 -> 16], G=8, K=2 (switching back to pipeline mode)
//   8. an MLP instruction streaming 17 words, which must raise the overflow flag
// Every mechanism is counted: zero skipping, pattern-mask drops, the stage-1
// stall, SPU/PE stage overlap, the k = 3 1/3 pass, ReLU clamping, SPU
// accumulate mode, aggregation, mode switches, overflow. A mechanism that never
// happens counts as a failure.
module tb_vikin_top;
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

  int checks = 0, failures = 0;
  longint cycle = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_zero_skip = 0, n_mask_drop = 0, n_stall = 0, n_overlap = 0, n_inv3 = 0;
  int n_relu = 0, n_spu_acc = 0, n_agg = 0, n_mode_sw = 0, n_ovf = 0;
  mode_e last_mode = MODE_PIPELINE;
  logic  last_ovf = 0;

  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int i = 0; i < NLANE; i++) if (dut.tse_in_v[i]) begin
      if (dut.tse_in_d[i][14:10] == 0) n_zero_skip++;
    end
    // lane 0 stands for all lanes: a non-zero element its pattern mask removes
    if (dut.tse_in_v[0] && dut.tse_in_d[0][14:10] != 0 && dut.mask_en &&
        !dut.mask[dut.u_tse.g_slice[0].u_slice.in_cnt[1:0]]) n_mask_drop++;
    if (s1_stall) n_stall++;
    if (dut.spu_busy_any && dut.tse_rd_busy) n_overlap++;
    if (dut.g_spu[0].u_spu.state == 2'd3) n_inv3++;
    if (dut.ob_we && dut.relu_en)
      for (int i = 0; i < NLANE; i++) if (dut.pe_acc[i][15] && dut.pe_acc[i][14:0] != 0) n_relu++;
    if (dut.mode == MODE_PARALLEL && dut.bus_en) n_spu_acc++;
    if (dut.ib_we && dut.ib_wsel_agg) n_agg++;
    if (dut.busy && dut.mode != last_mode) n_mode_sw++;
    if (dut.busy) last_mode = dut.mode;
    if (tse_overflow && !last_ovf) n_ovf++;
    last_ovf = tse_overflow;
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

  task automatic run(input instr_t ins);
    @(negedge clk);
    ins_wr_valid = 1; ins_wr_data = ins;
    @(negedge clk);
    ins_wr_valid = 0;
    while (!instr_done) @(negedge clk);
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

  // ---------------- reference models ----------------
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

  // KAN layer of NIN inputs (multiple of 16) and 16 outputs in pipeline mode.
  task automatic kan_layer(input int gc, input int kc, input int nin, input bit mask_en,
                           input logic [3:0] mask, input int ib_base, input int ob_addr);
    int    G, K, pitch, a, bank;
    real   x [64];
    real   wt [16][64][21];   // [out][in][offset]: t_0..t_{G+K-1}, w_b at G+K
    real   want [16], mag [16], row [NLANE], xv;
    fp16_t w [NLANE], got [NLANE];
    instr_t ins;
    G = 2 << gc; K = kc + 1; pitch = G + K + 1;
    for (int p = 0; p < nin; p++) x[p] = h2r(r2h(($urandom_range(2000) / 1000.0) - 1.0));
    for (int b = 0; b < nin / 16; b++) begin
      for (int i = 0; i < NLANE; i++) row[i] = x[b*16 + i];
      ib_write(ib_base + b, row);
    end
    for (int q = 0; q < 16; q++)
      for (int p = 0; p < nin; p++)
        for (int o = 0; o < pitch; o++)
          wt[q][p][o] = h2r(r2h(($urandom_range(1000) / 1000.0) - 0.5));
    // weight layout: group g, batch b, slice s -> word b*8*pitch + s*pitch + o
    for (int b = 0; b < nin / 16; b++)
      for (int g = 0; g < 2; g++)
        for (int s = 0; s < 8; s++)
          for (int o = 0; o < pitch; o++) begin
            a = b*8*pitch + s*pitch + o;
            bank = 2*g + a / 256;
            for (int q = 0; q < 16; q++) w[q] = r2h(wt[q][b*16 + g*8 + s][o]);
            wb_write(bank, a % 256, w);
          end
    for (int q = 0; q < 16; q++) begin
      want[q] = 0.0; mag[q] = 0.0;
      for (int p = 0; p < nin; p++) begin
        xv = x[p];
        want[q] += wt[q][p][G+K] * xv / (1.0 + $exp(-xv));
        mag[q]  += absr(wt[q][p][G+K] * xv);
        for (int i = 0; i < G + K; i++)
          if (!mask_en || mask[i % 4]) begin
            want[q] += wt[q][p][i] * bspline(G, K, i, xv);
            mag[q]  += absr(wt[q][p][i] * bspline(G, K, i, xv));
          end
      end
    end
    ins = '0;
    ins.op = OP_KAN; ins.g_code = 2'(gc); ins.k_code = 2'(kc);
    ins.mask = mask; ins.mask_en = mask_en; ins.clr = 1; ins.wb = 1;
    ins.in_base = 6'(ib_base); ins.n_words = 5'(nin / 16 - 1); ins.w_base = 0;
    ins.out_addr = 6'(ob_addr);
    run(ins);
    ob_read(ob_addr, got);
    for (int q = 0; q < 16; q++)
      expect_close($sformatf("KAN G=%0d K=%0d out %0d", G, K, q), got[q], want[q],
                   0.006 * mag[q] + 0.01);
  endtask

  // MLP layer: nwords input words from ib_base, 32 outputs (16 PE, 16 SPU).
  task automatic mlp_layer(input int nwords, input int ib_base, input bit mask_en,
                           input logic [3:0] mask, input int ob_addr, input int spu_addr);
    fp16_t xin [16][NLANE], w [NLANE], got [NLANE];
    real   wt [32][256], want [32], mag [32], acc;
    instr_t ins;
    for (int wd = 0; wd < nwords; wd++) ib_read(ib_base + wd, xin[wd]);
    for (int q = 0; q < 32; q++)
      for (int n = 0; n < nwords * 16; n++)
        wt[q][n] = h2r(r2h(($urandom_range(1000) / 1000.0) - 0.5));
    // bank g (PE) / g+2 (SPU), word wd*8 + n%8 for input n = wd*16 + g*8 + n%8
    for (int wd = 0; wd < nwords; wd++)
      for (int g = 0; g < 2; g++)
        for (int s = 0; s < 8; s++) begin
          for (int q = 0; q < 16; q++) w[q] = r2h(wt[q][wd*16 + g*8 + s]);
          wb_write(g, wd*8 + s, w);
          for (int q = 0; q < 16; q++) w[q] = r2h(wt[16 + q][wd*16 + g*8 + s]);
          wb_write(g + 2, wd*8 + s, w);
        end
    for (int q = 0; q < 32; q++) begin
      acc = 0.0; mag[q] = 0.0;
      for (int wd = 0; wd < nwords; wd++)
        if (!mask_en || mask[wd % 4])
          for (int l = 0; l < 16; l++) begin
            acc    += wt[q][wd*16 + l] * h2r(xin[wd][l]);
            mag[q] += absr(wt[q][wd*16 + l] * h2r(xin[wd][l]));
          end
      want[q] = acc > 0.0 ? acc : 0.0;
    end
    ins = '0;
    ins.op = OP_MLP; ins.mask = mask; ins.mask_en = mask_en; ins.relu = 1;
    ins.clr = 1; ins.wb = 1; ins.in_base = 6'(ib_base); ins.n_words = 5'(nwords - 1);
    ins.w_base = 0; ins.out_addr = 6'(ob_addr); ins.spu_addr = 6'(spu_addr);
    run(ins);
    ob_read(ob_addr, got);
    for (int q = 0; q < 16; q++)
      expect_close($sformatf("MLP PE out %0d", q), got[q], want[q], 0.004 * mag[q] + 0.01);
    ib_read(spu_addr, got);
    for (int q = 0; q < 16; q++)
      expect_close($sformatf("MLP SPU out %0d", q), got[q], want[16 + q], 0.004 * mag[q + 16] + 0.01);
  endtask

  initial begin
    real    row [NLANE];
    fp16_t  r1 [NLANE], cp [NLANE];
    instr_t ins;
    longint t0;
    for (int i = 0; i < NLANE; i++) begin h_ib_wdata[i] = 0; h_wb_wdata[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    t0 = cycle;
    kan_layer(1, 2, 32, 0, 4'b0000, 0, 0);
    $display("KAN [32,16] G=4 K=3: %0d cycles incl. loading", cycle - t0);
    kan_layer(1, 2, 32, 1, 4'b0101, 2, 1);
    kan_layer(0, 0, 16, 0, 4'b0000, 4, 2);
    kan_layer(3, 3, 16, 0, 4'b0000, 5, 3);

    // aggregation: output word 0 -> input word 10
    ob_read(0, r1);
    ins = '0; ins.op = OP_AGG; ins.out_addr = 6'd0; ins.in_base = 6'd10;
    run(ins);
    ib_read(10, cp);
    for (int i = 0; i < NLANE; i++) begin
      checks++;
      if (cp[i] !== r1[i]) begin failures++; $display("FAIL aggregation lane %0d", i); end
    end
    // MLP input: words 10..12, with explicit zeros (as after a ReLU)
    for (int wd = 11; wd < 13; wd++) begin
      for (int i = 0; i < NLANE; i++)
        row[i] = ($urandom_range(2) == 0) ? 0.0 : ($urandom_range(2000) / 1000.0) - 1.0;
      ib_write(wd, row);
    end
    mlp_layer(3, 10, 0, 4'b0000, 8, 20);
    mlp_layer(3, 10, 1, 4'b0111, 9, 21);
    kan_layer(2, 1, 16, 0, 4'b0000, 6, 4);    // back to pipeline mode, G=8, K=2

    // 17 non-zero words exceed a slice's 16 entries
    for (int wd = 30; wd < 47; wd++) begin
      for (int i = 0; i < NLANE; i++) row[i] = 0.5;
      ib_write(wd, row);
    end
    ins = '0; ins.op = OP_MLP; ins.clr = 1; ins.in_base = 6'd30; ins.n_words = 5'd16;
    run(ins);
    checks++;
    if (!tse_overflow) begin failures++; $display("FAIL no overflow on 17 words"); end

    $display("mechanisms: zero_skip=%0d mask_drop=%0d stall=%0d overlap=%0d inv3=%0d relu=%0d spu_acc=%0d agg=%0d mode_switch=%0d overflow=%0d",
             n_zero_skip, n_mask_drop, n_stall, n_overlap, n_inv3, n_relu, n_spu_acc, n_agg, n_mode_sw, n_ovf);
    checks++; if (n_zero_skip == 0) begin failures++; $display("FAIL no zero skip"); end
    checks++; if (n_mask_drop == 0) begin failures++; $display("FAIL no mask drop"); end
    checks++; if (n_stall == 0)     begin failures++; $display("FAIL no stage-1 stall"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("FAIL no stage overlap"); end
    checks++; if (n_inv3 == 0)      begin failures++; $display("FAIL no 1/3 pass"); end
    checks++; if (n_relu == 0)      begin failures++; $display("FAIL no ReLU clamp"); end
    checks++; if (n_spu_acc == 0)   begin failures++; $display("FAIL no SPU accumulate"); end
    checks++; if (n_agg == 0)       begin failures++; $display("FAIL no aggregation"); end
    checks++; if (n_mode_sw < 2)    begin failures++; $display("FAIL no mode switch"); end
    checks++; if (n_ovf == 0)       begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
