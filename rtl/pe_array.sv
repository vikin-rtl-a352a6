// pe_array: sixteen processing elements for the multiply-accumulate stage.
//
// Each PE holds two FP16 multipliers, an adder and an accumulator, as drawn in
// the design's PE array. The two multipliers take the two values on the input
// share bus (a0 from sparsity-encoder group 0, a1 from group 1), which every PE
// sees, and each PE's own pair of weights from the weight buffer (w0[i], w1[i]).
// PE i therefore computes one output node:
//
//   acc[i] <= acc[i] + a0 * w0[i] + a1 * w1[i]   when acc_en
//   acc[i] <= 0                                  when acc_clr (takes priority)
//
// A share-bus slot with no data is driven as zero by the controller, so it adds
// nothing. One accumulation per clock; acc is the registered sum.
module pe_array
  import vikin_pkg::*;
#(
  parameter int unsigned LANES = NLANE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  acc_clr,
  input  logic  acc_en,
  input  fp16_t a0,
  input  fp16_t a1,
  input  fp16_t w0  [LANES],
  input  fp16_t w1  [LANES],
  output fp16_t acc [LANES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) acc[i] <= FP16_ZERO;
    end else if (acc_clr) begin
      for (int i = 0; i < LANES; i++) acc[i] <= FP16_ZERO;
    end else if (acc_en) begin
      for (int i = 0; i < LANES; i++) acc[i] <= fp16_add(acc[i], fp16_dot2(a0, w0[i], a1, w1[i]));
    end
  end

endmodule
