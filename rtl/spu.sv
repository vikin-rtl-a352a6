// spu: reconfigurable B-spline unit (SPU).
//
// Iterative mode (KAN, pipeline mode) evaluates every B-spline basis B_i(x) of
// order K on a uniform grid of G intervals over [-1, 1], extended by K knots on
// each side (the usual KAN grid), for one FP16 input x:
//
//   knot x_j = -1 + (j - K) * h,  h = 2/G,  j = 0 .. G+2K
//   B_{0,i}  = 1 if x_j <= x < x_{j+1}
//   B_{k,i}  = (x - x_i)/(k h) * B_{k-1,i} + (x_{i+k+1} - x)/(k h) * B_{k-1,i+1}
//
// Following the design description, the differences x - x_j ("positive grid")
// and x_j - x ("negative grid") are computed once, while the zero-order bases
// are formed, and kept in a stage buffer; the higher orders reuse them.
// Because G is one of 2, 4, 8, 16 and K one of 1..4, 1/(k h) is a power of two
// for k = 1, 2, 4 and is applied by adjusting the exponent ("Div2 (exp-n)");
// for k = 3 the exponent adjustment gives 2^(log2 G - 1) and a second pass
// through a multiplier applies the constant 1/3 ("Inv3 LUT"). Each order
// overwrites the temporary results in place, in ascending i.
//
// Schedule (this design's own): one knot difference per clock (G+2K+1 clocks),
// then one basis per clock for orders 1..K (two clocks per basis at k = 3).
// The G+K bases of order K leave on b_valid/b_data/b_idx, one per clock. While
// out_ready is low the unit holds before producing a final-order basis; this
// lets the controller run the lower orders of the next batch while the sparsity
// encoder is still being drained.
//
// Accumulate mode (MLP, parallel mode) reuses the two multipliers and the adder
// as a MAC: acc <= acc + a0*w0 + a1*w1 on acc_en, acc <= 0 on acc_clr; sum is
// the accumulator. cfg_g_code selects G = 2 << cfg_g_code, cfg_k_code K = code+1.
module spu
  import vikin_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] cfg_g_code,
  input  logic [1:0] cfg_k_code,
  // iterative mode
  input  logic       start,
  input  fp16_t      x,
  input  logic       out_ready,
  output logic       busy,
  output logic       b_valid,
  output fp16_t      b_data,
  output logic [4:0] b_idx,
  // accumulate mode
  input  logic       acc_clr,
  input  logic       acc_en,
  input  fp16_t      a0,
  input  fp16_t      w0,
  input  fp16_t      a1,
  input  fp16_t      w1,
  output fp16_t      sum
);

  localparam int NKNOT_MAX = 16 + 2 * 4 + 1;  // G + 2K + 1 at G = 16, K = 4
  localparam int SB_DEPTH  = 32;              // stage buffer rows, one per 5-bit index

  typedef enum logic [1:0] {S_IDLE, S_DIFF, S_ORD, S_INV3} state_e;

  state_e      state;
  fp16_t       x_q;
  logic [1:0]  g_q, k_q;
  logic [4:0]  j;          // knot / basis index
  logic [2:0]  ord;        // current order k
  fp16_t       pos_grid [SB_DEPTH];  // x - x_j
  fp16_t       neg_grid [SB_DEPTH];  // x_j - x
  fp16_t       temp     [SB_DEPTH];  // B_{k,i}
  fp16_t       pend;                  // k = 3 partial result awaiting 1/3
  fp16_t       acc;

  int          gval, kval, nknot, nb, div_n;
  fp16_t       knot, diff, bsum;
  logic        final_ord;

  always_comb begin
    gval      = 2 << g_q;
    kval      = int'(k_q) + 1;
    nknot     = gval + 2 * kval + 1;
    nb        = gval + 2 * kval - int'(ord);          // bases of order ord
    knot      = fp16_from_int(int'(j) - kval - gval / 2, -int'(g_q));
    diff      = fp16_add(x_q, {~knot[15], knot[14:0]});
    unique case (ord)
      3'd2:    div_n = int'(g_q) - 1;
      3'd4:    div_n = int'(g_q) - 2;
      default: div_n = int'(g_q);                      // k = 1, and k = 3 before 1/3
    endcase
    bsum      = fp16_dot2(fp16_scale2(pos_grid[j], div_n), temp[j],
                          fp16_scale2(neg_grid[5'(int'(j) + int'(ord) + 1)], div_n),
                          temp[5'(int'(j) + 1)]);
    final_ord = int'(ord) == kval;
  end

  function automatic logic is_neg(input fp16_t v);
    return v[15] && !fp16_is_zero(v);
  endfunction

  assign busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      x_q     <= FP16_ZERO;
      g_q     <= '0;
      k_q     <= '0;
      j       <= '0;
      ord     <= '0;
      pend    <= FP16_ZERO;
      b_valid <= 1'b0;
      b_data  <= FP16_ZERO;
      b_idx   <= '0;
      for (int i = 0; i < SB_DEPTH; i++) begin
        pos_grid[i] <= FP16_ZERO;
        neg_grid[i] <= FP16_ZERO;
        temp[i]     <= FP16_ZERO;
      end
    end else begin
      b_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x_q   <= x;
          g_q   <= cfg_g_code;
          k_q   <= cfg_k_code;
          j     <= '0;
          ord   <= '0;
          state <= S_DIFF;
        end
        S_DIFF: begin
          pos_grid[j] <= diff;
          neg_grid[j] <= {~diff[15], diff[14:0]};
          temp[j]     <= FP16_ZERO;
          if (j != 0)
            temp[j-1] <= (!is_neg(pos_grid[j-1]) && is_neg(diff)) ? FP16_ONE : FP16_ZERO;
          if (int'(j) == nknot - 1) begin
            j     <= '0;
            ord   <= 3'd1;
            state <= S_ORD;
          end else begin
            j <= j + 1'b1;
          end
        end
        S_ORD: if (!final_ord || out_ready) begin
          if (ord == 3'd3) begin
            pend  <= bsum;
            state <= S_INV3;
          end else begin
            temp[j] <= bsum;
            if (final_ord) begin
              b_valid <= 1'b1;
              b_data  <= bsum;
              b_idx   <= j;
            end
            if (int'(j) == nb - 1) begin
              j   <= '0;
              ord <= ord + 1'b1;
              if (final_ord) state <= S_IDLE;
            end else begin
              j <= j + 1'b1;
            end
          end
        end
        S_INV3: if (!final_ord || out_ready) begin
          temp[j] <= fp16_mul(pend, FP16_INV3);
          if (final_ord) begin
            b_valid <= 1'b1;
            b_data  <= fp16_mul(pend, FP16_INV3);
            b_idx   <= j;
          end
          state <= S_ORD;
          if (int'(j) == nb - 1) begin
            j   <= '0;
            ord <= ord + 1'b1;
            if (final_ord) state <= S_IDLE;
          end else begin
            j <= j + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Accumulate mode: the same two-multiplier dot product feeds the accumulator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= FP16_ZERO;
    else if (acc_clr) acc <= FP16_ZERO;
    else if (acc_en) acc <= fp16_add(acc, fp16_dot2(a0, w0, a1, w1));
  end

  assign sum = acc;

  // The basis index must stay inside the stage buffer.
  property p_idx_range;
    @(posedge clk) disable iff (!rst_n) busy |-> int'(j) < NKNOT_MAX;
  endproperty
  assert property (p_idx_range);

endmodule
