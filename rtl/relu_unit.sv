// relu_unit: sixteen-lane ReLU on the write-back path.
//
// In parallel (MLP) mode the results of the PE array and of the SPU array pass
// through a ReLU on their way to the output and input buffers; the zeros it
// creates are what the sparsity encoder later skips. In pipeline (KAN) mode
// the ReLU is bypassed (en = 0). FP16 ReLU clears every negative value,
// including -0, to +0. Purely combinational.
module relu_unit
  import vikin_pkg::*;
#(
  parameter int unsigned LANES = NLANE
) (
  input  logic  en,
  input  fp16_t d [LANES],
  output fp16_t q [LANES]
);

  always_comb
    for (int i = 0; i < LANES; i++) q[i] = en ? fp16_relu(d[i]) : d[i];

endmodule
