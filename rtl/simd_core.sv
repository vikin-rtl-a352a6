// simd_core: sixteen-lane SiLU unit feeding the base branch of a KAN layer.
//
// In pipeline mode the SIMD core evaluates silu(x) = x / (1 + exp(-x)) for the
// sixteen inputs of a batch at once, while each B-spline unit works on one of
// them. The result is written into the sparsity encoder as a dense value (it is
// never filtered). Only the core's role and its sixteen-way parallelism come from
// the design description; how silu is evaluated is this design's own choice:
//
//   sigmoid(|x|) ~ a_k * |x| + b_k,  k = floor(2 |x|), 16 chords over [0, 8)
//   sigmoid(|x|) = 1 for |x| >= 8
//   silu(x) = x * sigmoid(|x|)          for x >= 0
//   silu(x) = x * (1 - sigmoid(|x|))    for x < 0
//
// a_k and b_k are the chord through sigmoid(k/2) and sigmoid((k+1)/2), rounded
// to FP16. The chord error is below 4e-3 in the sigmoid.
//
// Interface: in_valid/x[16] in, out_valid/y[16] out one clock later (one
// register stage after the combinational evaluation); y then holds until
// the next in_valid. No back-pressure.
module simd_core
  import vikin_pkg::*;
#(
  parameter int unsigned LANES = NLANE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t x [LANES],
  output logic  out_valid,
  output fp16_t y [LANES]
);

  localparam fp16_t SLOPE [16] = '{
    16'h33d6, 16'h32f3, 16'h3189, 16'h300c, 16'h2d8c, 16'h2b47, 16'h28a3, 16'h25cd,
    16'h232b, 16'h2066, 16'h1d5f, 16'h1a8b, 16'h17f5, 16'h14d6, 16'h11df, 16'h0f20};
  localparam fp16_t ICEPT [16] = '{
    16'h3800, 16'h381c, 16'h3877, 16'h3906, 16'h39a9, 16'h3a41, 16'h3ac0, 16'h3b22,
    16'h3b68, 16'h3b9a, 16'h3bbd, 16'h3bd4, 16'h3be3, 16'h3bed, 16'h3bf4, 16'h3bf8};

  function automatic fp16_t silu(input fp16_t v);
    fp16_t       ax, sig;
    logic [4:0]  e;
    logic [10:0] mant;
    logic [3:0]  k;
    ax   = {1'b0, v[14:0]};
    e    = v[14:10];
    mant = {1'b1, v[9:0]};
    if (e < 5'd14) k = 4'd0;                  // |x| < 0.5
    else k = 4'(mant >> (5'd24 - e));         // floor(2|x|) for 0.5 <= |x| < 8
    if (e >= 5'd18) sig = FP16_ONE;           // |x| >= 8
    else sig = fp16_add(fp16_mul(SLOPE[k], ax), ICEPT[k]);
    if (v[15]) sig = fp16_add(FP16_ONE, {1'b1, sig[14:0]});
    return fp16_mul(v, sig);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) y[i] <= FP16_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++) y[i] <= silu(x[i]);
    end
  end

endmodule
