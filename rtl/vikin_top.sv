// vikin_top: the VIKIN accelerator core, one engine for KAN and MLP layers.
//
// Blocks: instruction buffer and main controller; 2 KB input buffer; SIMD core
// (silu); sixteen B-spline units (SPU array); the two-stage sparsity encoder
// (TSE); 32 KB four-bank weight buffer with its memory controller; sixteen-PE
// array; ReLU; 2 KB output buffer. The interconnect that the design places
// between them is the mode-dependent routing in this file:
//
//   pipeline mode (KAN)   input buffer -> SIMD core + SPU array (iterative)
//                         SPU B_i(x) streams -> TSE lanes, silu -> TSE bypass
//                         TSE groups -> share bus -> PE array -> output buffer
//   parallel mode (MLP)   input buffer -> TSE lanes
//                         TSE groups -> share bus -> PE array and SPU array
//                         (accumulate mode), 32 output nodes per batch
//                         ReLU(PE) -> output buffer, ReLU(SPU) -> input buffer
//   aggregation           output buffer -> input buffer (next layer's input)
//
// The share bus is registered, one clock, so that each value meets the weights
// read from the weight buffer in the same clock.
//
// The host processor, the global buffer and the interface module that joins
// them to the core are outside this design. Their side is brought out as
// ports: an instruction push port, whole-word write ports into the input
// buffer and the weight buffer, and read ports on the input and output buffers
// (the host should use these only while busy is low; the core has priority).
module vikin_top
  import vikin_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // instructions
  input  logic       ins_wr_valid,
  input  instr_t     ins_wr_data,
  output logic       ins_wr_ready,
  // input buffer, host side
  input  logic       h_ib_we,
  input  logic [5:0] h_ib_addr,
  input  fp16_t      h_ib_wdata [NLANE],
  input  logic       h_ib_rd_en,
  output fp16_t      ib_rd_data [NLANE],
  // output buffer, host side
  input  logic       h_ob_rd_en,
  input  logic [5:0] h_ob_addr,
  output fp16_t      ob_rd_data [NLANE],
  // weight buffer, global-buffer side
  input  logic       h_wb_we,
  input  logic [1:0] h_wb_bank,
  input  logic [7:0] h_wb_addr,
  input  fp16_t      h_wb_wdata [NLANE],
  // status
  output logic       busy,
  output logic       instr_done,
  output logic       tse_overflow,
  output logic       s1_stall       // stage 1 waits for stage 2 (pipeline mode)
);

  // ---------------- controller ----------------
  logic       ins_valid, ins_pop;
  instr_t     ins_data;
  mode_e      mode;
  logic [1:0] g_code, k_code;
  logic [3:0] mask;
  logic       mask_en;
  logic [4:0] pitch, tse_byp_off;
  logic [8:0] w_base;
  logic       ib_rd_en_c, ib_we, ib_wsel_agg, ob_rd_en_c, ob_we, relu_en;
  logic [5:0] ib_rd_addr_c, ib_waddr, ob_rd_addr_c, ob_waddr;
  logic       simd_valid, spu_start, spu_out_ready, spu_busy_any, acc_clr;
  logic       tse_clr, tse_byp, tse_fill, tse_rd_start, tse_rd_busy;

  ins_buffer u_ins (
    .clk, .rst_n,
    .wr_valid (ins_wr_valid), .wr_data (ins_wr_data), .wr_ready (ins_wr_ready),
    .rd_valid (ins_valid), .rd_data (ins_data), .rd_pop (ins_pop)
  );

  main_controller u_ctrl (
    .clk, .rst_n,
    .ins_valid, .ins_data, .ins_pop,
    .mode, .g_code, .k_code, .mask, .mask_en, .pitch, .w_base,
    .ib_rd_en (ib_rd_en_c), .ib_rd_addr (ib_rd_addr_c), .ib_we, .ib_waddr, .ib_wsel_agg,
    .ob_rd_en (ob_rd_en_c), .ob_rd_addr (ob_rd_addr_c), .ob_we, .ob_waddr, .relu_en,
    .simd_valid, .spu_start, .spu_out_ready, .spu_busy (spu_busy_any), .acc_clr,
    .tse_clr, .tse_byp, .tse_byp_off, .tse_fill, .tse_rd_start, .tse_rd_busy,
    .busy, .instr_done, .s1_stall
  );

  // ---------------- input and output buffers ----------------
  fp16_t pe_relu [NLANE], spu_relu [NLANE], ib_cdata [NLANE];
  fp16_t pe_acc [NLANE], spu_sum [NLANE];

  relu_unit u_relu_pe  (.en (relu_en), .d (pe_acc),  .q (pe_relu));
  relu_unit u_relu_spu (.en (relu_en), .d (spu_sum), .q (spu_relu));

  always_comb
    for (int i = 0; i < NLANE; i++) ib_cdata[i] = ib_wsel_agg ? ob_rd_data[i] : spu_relu[i];

  act_buffer u_ibuf (
    .clk,
    .h_we (h_ib_we), .h_addr (h_ib_addr), .h_wdata (h_ib_wdata),
    .c_we (ib_we), .c_lane_en ({NLANE{1'b1}}), .c_addr (ib_waddr), .c_wdata (ib_cdata),
    .rd_en (ib_rd_en_c || h_ib_rd_en), .rd_addr (ib_rd_en_c ? ib_rd_addr_c : h_ib_addr),
    .rd_data (ib_rd_data)
  );

  act_buffer u_obuf (
    .clk,
    .h_we (1'b0), .h_addr (h_ob_addr), .h_wdata (pe_relu),
    .c_we (ob_we), .c_lane_en ({NLANE{1'b1}}), .c_addr (ob_waddr), .c_wdata (pe_relu),
    .rd_en (ob_rd_en_c || h_ob_rd_en), .rd_addr (ob_rd_en_c ? ob_rd_addr_c : h_ob_addr),
    .rd_data (ob_rd_data)
  );

  // ---------------- SIMD core and SPU array ----------------
  // out_valid is left open: silu_y holds until the next input word, and the
  // controller writes it into the encoder once the encoder is free, which may
  // be several clocks after the result appeared.
  fp16_t silu_y [NLANE];

  simd_core u_simd (
    .clk, .rst_n, .in_valid (simd_valid), .x (ib_rd_data),
    .out_valid (), .y (silu_y)
  );

  // Share bus (registered TSE group outputs).
  logic  bus_v [2];
  fp16_t bus_d [2];
  logic  bus_en;
  assign bus_en = bus_v[0] || bus_v[1];

  fp16_t            pe_w0 [NLANE], pe_w1 [NLANE], spu_w0 [NLANE], spu_w1 [NLANE];
  logic [NLANE-1:0] spu_busy;
  logic             spu_bv  [NLANE];
  fp16_t            spu_bd  [NLANE];
  logic [4:0]       spu_bi  [NLANE];

  for (genvar i = 0; i < NLANE; i++) begin : g_spu
    spu u_spu (
      .clk, .rst_n,
      .cfg_g_code (g_code), .cfg_k_code (k_code),
      .start (spu_start), .x (ib_rd_data[i]), .out_ready (spu_out_ready),
      .busy (spu_busy[i]), .b_valid (spu_bv[i]), .b_data (spu_bd[i]), .b_idx (spu_bi[i]),
      .acc_clr, .acc_en (bus_en && mode == MODE_PARALLEL),
      .a0 (bus_d[0]), .w0 (spu_w0[i]), .a1 (bus_d[1]), .w1 (spu_w1[i]),
      .sum (spu_sum[i])
    );
  end
  assign spu_busy_any = |spu_busy;

  // ---------------- two-stage sparsity encoder ----------------
  logic             tse_in_v [NLANE];
  fp16_t            tse_in_d [NLANE];
  logic             grp_valid [2];
  fp16_t            grp_data  [2];
  logic [OFF_W-1:0] grp_off   [2];
  logic [2:0]       grp_slice [2];

  always_comb
    for (int i = 0; i < NLANE; i++) begin
      tse_in_v[i] = (mode == MODE_PIPELINE) ? spu_bv[i] : tse_fill;
      tse_in_d[i] = (mode == MODE_PIPELINE) ? spu_bd[i] : ib_rd_data[i];
    end

  tse u_tse (
    .clk, .rst_n, .clr (tse_clr), .mask, .mask_en,
    .in_valid (tse_in_v), .in_data (tse_in_d),
    .byp_valid (tse_byp), .byp_data (silu_y), .byp_off (tse_byp_off),
    .rd_start (tse_rd_start), .rd_busy (tse_rd_busy),
    .grp_valid, .grp_data, .grp_off, .grp_slice,
    .overflow (tse_overflow)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 2; g++) begin
        bus_v[g] <= 1'b0;
        bus_d[g] <= FP16_ZERO;
      end
    end else begin
      for (int g = 0; g < 2; g++) begin
        bus_v[g] <= grp_valid[g];
        bus_d[g] <= grp_valid[g] ? grp_data[g] : FP16_ZERO;
      end
    end
  end

  // ---------------- weight buffer and PE array ----------------
  weight_buffer u_wbuf (
    .clk, .rst_n, .mode, .pitch, .base (w_base),
    .rd_valid (grp_valid), .rd_off (grp_off), .rd_slice (grp_slice),
    .h_we (h_wb_we), .h_bank (h_wb_bank), .h_addr (h_wb_addr), .h_wdata (h_wb_wdata),
    .pe_w0, .pe_w1, .spu_w0, .spu_w1
  );

  pe_array u_pe (
    .clk, .rst_n, .acc_clr, .acc_en (bus_en),
    .a0 (bus_d[0]), .a1 (bus_d[1]), .w0 (pe_w0), .w1 (pe_w1), .acc (pe_acc)
  );

  // Each SPU emits its bases in order, so its index matches the slice's InCnt.
  for (genvar i = 0; i < NLANE; i++) begin : g_chk
    logic [4:0] exp_idx;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) exp_idx <= '0;
      else if (tse_clr) exp_idx <= '0;
      else if (spu_bv[i] && mode == MODE_PIPELINE) exp_idx <= exp_idx + 1'b1;
    assert property (@(posedge clk) disable iff (!rst_n)
                     (spu_bv[i] && mode == MODE_PIPELINE) |-> spu_bi[i] == exp_idx);
  end

endmodule
