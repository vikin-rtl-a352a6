// main_controller: sequences the pipeline (KAN) and parallel (MLP) modes.
//
// The controller takes one instruction at a time from the instruction buffer.
// The design description gives the two dataflows; the instruction set, the
// state machines and the exact overlap below are this design's own.
//
// OP_KAN (pipeline mode) computes one batch of 16 output nodes of a KAN layer
// over n_words+1 batches of 16 inputs. It runs as two overlapping stages:
//   stage 1  read input word b; start all 16 SPUs and the SIMD core on it;
//            once stage 2 has released the sparsity encoder, clear it, write
//            the 16 silu values (offset G+K) and let the SPUs emit their
//            final-order bases into it (spu_out_ready); when every SPU is
//            done hand the encoder to stage 2 and start on batch b+1;
//   stage 2  the two dense pointers walk the encoder; every clock the PE
//            array accumulates up to two (value, weight) products per PE.
// While stage 2 of batch b runs, the SPUs already compute orders 0..K-1 of
// batch b+1 and hold before their final order until the encoder is free
// (s1_stall counts those clocks). Weight base of batch b in each bank pair:
// w_base + b * 8 * (G+K+1). With wb set, the PE sums go to output-buffer
// word out_addr, without ReLU.
//
// OP_MLP (parallel mode) streams input words in_base .. in_base+n_words (at
// most 16) through the encoder, one per clock, then drains it; the PE array
// and the SPU array (accumulate mode) both accumulate, giving 32 output nodes.
// With wb set, ReLU(PE sums) go to output-buffer word out_addr and ReLU(SPU
// sums) to input-buffer word spu_addr.
//
// OP_AGG copies output-buffer word out_addr into input-buffer word in_base
// (aggregation of a layer's outputs into the next layer's inputs).
//
// clr clears the accumulators at the start of an instruction, so a layer
// with more inputs than one instruction covers is split over several.
module main_controller
  import vikin_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // instruction buffer
  input  logic       ins_valid,
  input  instr_t     ins_data,
  output logic       ins_pop,
  // configuration to the datapath
  output mode_e      mode,
  output logic [1:0] g_code,
  output logic [1:0] k_code,
  output logic [3:0] mask,
  output logic       mask_en,
  output logic [4:0] pitch,
  output logic [8:0] w_base,
  // input buffer
  output logic       ib_rd_en,
  output logic [5:0] ib_rd_addr,
  output logic       ib_we,
  output logic [5:0] ib_waddr,
  output logic       ib_wsel_agg,   // 1: write output-buffer data, 0: SPU sums
  // output buffer
  output logic       ob_rd_en,
  output logic [5:0] ob_rd_addr,
  output logic       ob_we,
  output logic [5:0] ob_waddr,
  output logic       relu_en,
  // SIMD core and SPU array
  output logic       simd_valid,
  output logic       spu_start,
  output logic       spu_out_ready,
  input  logic       spu_busy,
  output logic       acc_clr,
  // sparsity encoder
  output logic       tse_clr,
  output logic       tse_byp,
  output logic [4:0] tse_byp_off,
  output logic       tse_fill,      // parallel mode: input-buffer word enters the encoder
  output logic       tse_rd_start,
  input  logic       tse_rd_busy,
  // status
  output logic       busy,
  output logic       instr_done,
  output logic       s1_stall
);

  typedef enum logic [3:0] {
    C_IDLE, C_KAN_RD, C_KAN_START, C_KAN_WAIT, C_KAN_SILU, C_KAN_EMIT, C_KAN_HAND,
    C_MLP_FILL, C_MLP_LAST, C_MLP_RUN, C_FIN, C_WB, C_AGG_RD, C_AGG_WR
  } cstate_e;

  typedef enum logic [1:0] {S2_IDLE, S2_RUN, S2_DRAIN1, S2_DRAIN2} s2state_e;

  cstate_e  st;
  s2state_e s2;
  instr_t   ins;
  logic [4:0] b;          // batch (KAN) or word (MLP) counter
  logic [8:0] s2_base;    // weight base of the batch in stage 2
  logic       s2_go;      // request to start stage 2
  logic       fill_q;     // MLP: input word read last clock
  logic       s2_free;

  assign mode    = (ins.op == OP_MLP) ? MODE_PARALLEL : MODE_PIPELINE;
  assign g_code  = ins.g_code;
  assign k_code  = ins.k_code;
  assign mask    = ins.mask;
  assign mask_en = ins.mask_en;
  assign pitch   = 5'((2 << ins.g_code) + int'(ins.k_code) + 2);
  assign w_base  = s2_base;
  assign tse_byp_off = 5'((2 << ins.g_code) + int'(ins.k_code) + 1);
  assign s2_free = (s2 == S2_IDLE || s2 == S2_DRAIN1 || s2 == S2_DRAIN2) && !s2_go;
  assign busy    = st != C_IDLE;
  assign tse_rd_start = s2_go;
  assign tse_fill = fill_q;

  always_comb begin
    ins_pop       = 1'b0;
    ib_rd_en      = 1'b0;
    ib_rd_addr    = ins.in_base + 6'(b);
    ib_we         = 1'b0;
    ib_waddr      = ins.spu_addr;
    ib_wsel_agg   = 1'b0;
    ob_rd_en      = 1'b0;
    ob_rd_addr    = ins.out_addr;
    ob_we         = 1'b0;
    ob_waddr      = ins.out_addr;
    relu_en       = ins.relu && ins.op == OP_MLP;
    simd_valid    = 1'b0;
    spu_start     = 1'b0;
    spu_out_ready = 1'b0;
    tse_clr       = 1'b0;
    tse_byp       = 1'b0;
    s1_stall      = 1'b0;
    unique case (st)
      C_IDLE:      ins_pop = ins_valid;
      C_KAN_RD:    ib_rd_en = 1'b1;
      C_KAN_START: begin
        spu_start  = 1'b1;
        simd_valid = 1'b1;
      end
      C_KAN_WAIT: begin
        tse_clr  = s2_free;
        s1_stall = !s2_free;
      end
      C_KAN_SILU:  tse_byp = 1'b1;
      C_KAN_EMIT:  spu_out_ready = 1'b1;
      C_MLP_FILL: begin
        ib_rd_en = 1'b1;
        if (b == 5'd0) tse_clr = 1'b1;
      end
      C_WB: begin
        ob_we = ins.wb;
        ib_we = ins.wb && ins.op == OP_MLP;
      end
      C_AGG_RD:    ob_rd_en = 1'b1;
      C_AGG_WR: begin
        ib_we       = 1'b1;
        ib_waddr    = ins.in_base;
        ib_wsel_agg = 1'b1;
      end
      default: ;
    endcase
  end

  // MLP fill: the word read in C_MLP_FILL reaches the encoder one clock later,
  // so the encoder clear (same clock as the first read) precedes it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fill_q <= 1'b0;
    else        fill_q <= st == C_MLP_FILL;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      ins        <= '0;
      b          <= '0;
      s2_go      <= 1'b0;
      s2_base    <= '0;
      acc_clr    <= 1'b0;
      instr_done <= 1'b0;
    end else begin
      s2_go      <= 1'b0;
      acc_clr    <= 1'b0;
      instr_done <= 1'b0;
      unique case (st)
        C_IDLE: if (ins_valid) begin
          ins     <= ins_data;
          b       <= '0;
          acc_clr <= ins_data.clr;
          unique case (ins_data.op)
            OP_KAN:  st <= C_KAN_RD;
            OP_MLP:  st <= C_MLP_FILL;
            OP_AGG:  st <= C_AGG_RD;
            default: instr_done <= 1'b1;
          endcase
        end
        C_KAN_RD:    st <= C_KAN_START;
        C_KAN_START: st <= C_KAN_WAIT;
        C_KAN_WAIT:  if (s2_free) st <= C_KAN_SILU;
        C_KAN_SILU:  st <= C_KAN_EMIT;
        C_KAN_EMIT:  if (!spu_busy) st <= C_KAN_HAND;
        C_KAN_HAND: begin
          s2_go   <= 1'b1;
          s2_base <= ins.w_base + 9'(int'(b) * 8 * int'(pitch));
          b       <= b + 1'b1;
          st      <= (b == ins.n_words) ? C_FIN : C_KAN_RD;
        end
        C_MLP_FILL: begin
          b <= b + 1'b1;
          if (b == ins.n_words) st <= C_MLP_LAST;
        end
        C_MLP_LAST: begin
          s2_go   <= 1'b1;
          s2_base <= ins.w_base;
          st      <= C_MLP_RUN;
        end
        C_MLP_RUN:   st <= C_FIN;
        C_FIN:       if (s2 == S2_IDLE && !s2_go) st <= C_WB;
        C_WB: begin
          instr_done <= 1'b1;
          st         <= C_IDLE;
        end
        C_AGG_RD:    st <= C_AGG_WR;
        C_AGG_WR: begin
          instr_done <= 1'b1;
          st         <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // Stage 2: wait for the pointers to finish, then two clocks for the weight
  // read and the last accumulation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2 <= S2_IDLE;
    else begin
      unique case (s2)
        S2_IDLE:   if (s2_go) s2 <= S2_RUN;
        S2_RUN:    if (!tse_rd_busy) s2 <= S2_DRAIN1;
        S2_DRAIN1: s2 <= S2_DRAIN2;
        S2_DRAIN2: s2 <= S2_IDLE;
        default:   s2 <= S2_IDLE;
      endcase
    end
  end

  // The encoder is never cleared while stage 2 still reads it.
  assert property (@(posedge clk) disable iff (!rst_n) tse_clr |-> s2 != S2_RUN);

endmodule
