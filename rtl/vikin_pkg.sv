// vikin_pkg: types, sizes and FP16 arithmetic shared by the VIKIN accelerator.
//
// The accelerator computes KAN and MLP layers in IEEE-754 half precision (FP16),
// as the design it follows does. The arithmetic here is this design's own: the
// functions round to nearest-even, treat subnormal inputs as zero and flush
// subnormal results to zero, saturate overflow to infinity and do not model NaN.
// Every adder and multiplier in the datapath (SIMD core, B-spline units, PEs)
// calls these functions, so the whole chip rounds the same way.
//
// Array sizes follow the design: 16 B-spline units, 16 PEs, 16 sparsity-encoder
// slices of 16 dense entries each, a 32 KB weight buffer in four banks and 2 KB
// input and output buffers. The instruction format is this design's own.
package vikin_pkg;

  typedef logic [15:0] fp16_t;

  localparam int unsigned NLANE      = 16;  // SPUs, PEs, TSE slices, SIMD lanes
  localparam int unsigned SPAD_DEPTH = 16;  // dense entries per TSE slice
  localparam int unsigned OFF_W      = 5;   // offset (InCnt) width, printed "5b"
  localparam int unsigned WORD_W     = NLANE * 16;  // one buffer word: 16 FP16 values

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3c00;
  localparam fp16_t FP16_INV3 = 16'h3555;  // 1/3 rounded to FP16 (the "Inv3 LUT")

  // Operation mode of the accelerator.
  typedef enum logic {
    MODE_PIPELINE = 1'b0,  // KAN: SIMD + SPU array -> TSE -> PE array
    MODE_PARALLEL = 1'b1   // MLP: input buffer -> TSE -> PE array and SPU array
  } mode_e;

  // Instruction opcodes.
  typedef enum logic [1:0] {
    OP_KAN = 2'd0,  // one output batch of a KAN layer (pipeline mode)
    OP_MLP = 2'd1,  // one output batch of an MLP layer (parallel mode)
    OP_AGG = 2'd2,  // copy an output-buffer word into the input buffer
    OP_NOP = 2'd3
  } opcode_e;

  // One instruction, written by the host into the instruction buffer.
  typedef struct packed {
    opcode_e     op;
    logic [1:0]  g_code;    // grid size G = 2 << g_code  (2, 4, 8, 16)
    logic [1:0]  k_code;    // spline order K = k_code + 1 (1, 2, 3, 4)
    logic [3:0]  mask;      // pattern mask, bit i keeps element i of each group of four
    logic        mask_en;   // second sparsity stage on
    logic        relu;      // ReLU on write-back (parallel mode)
    logic        clr;       // clear accumulators before the operation
    logic        wb;        // write the accumulators back after the operation
    logic [5:0]  in_base;   // first input-buffer word (OP_AGG: destination word)
    logic [4:0]  n_words;   // input words to process, minus one
    logic [8:0]  w_base;    // first weight-buffer word of each bank group
    logic [5:0]  out_addr;  // output-buffer word for PE results (OP_AGG: source)
    logic [5:0]  spu_addr;  // input-buffer word for SPU results (parallel mode)
  } instr_t;

  // ---------------------------------------------------------------------------
  // FP16 helpers
  // ---------------------------------------------------------------------------

  function automatic logic fp16_is_zero(input fp16_t a);
    return a[14:10] == 5'd0;  // zero or subnormal (treated as zero)
  endfunction

  // Round a normalised magnitude and pack it. m holds the hidden bit at bit 13,
  // ten fraction bits, then guard, round and sticky bits [2:0]. e is the biased
  // exponent before rounding.
  function automatic fp16_t fp16_pack(input logic s, input int e, input logic [13:0] m);
    logic [11:0] r;
    int          ee;
    logic        up;
    up = m[2] && (m[1] || m[0] || m[3]);
    r  = {1'b0, m[13:3]} + 12'(up);
    ee = e;
    if (r[11]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee <= 0) return {s, 15'd0};
    if (ee >= 31) return {s, 5'h1f, 10'd0};
    return {s, ee[4:0], r[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        s;
    logic [21:0] p;
    logic [13:0] m;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      m = {p[21:9], |p[8:0]};
      e = e + 1;
    end else begin
      m = {p[20:8], |p[7:0]};
    end
    return fp16_pack(s, e, m);
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    fp16_t       x, y;
    int          d, e;
    logic [14:0] mx, my, ms;
    logic [13:0] m;
    logic        sticky;
    if (fp16_is_zero(b)) return fp16_is_zero(a) ? {a[15] & b[15], 15'd0} : a;
    if (fp16_is_zero(a)) return b;
    if (a[14:0] >= b[14:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    d  = int'(x[14:10]) - int'(y[14:10]);
    mx = {1'b0, 1'b1, x[9:0], 3'b000};
    my = {1'b0, 1'b1, y[9:0], 3'b000};
    if (d > 13) begin
      my = 15'd1;  // only the sticky bit is left
    end else if (d > 0) begin
      sticky = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d && my[i]) sticky = 1'b1;
      my = (my >> d) | {14'd0, sticky};
    end
    e = int'(x[14:10]);
    if (x[15] == y[15]) begin
      ms = mx + my;
      if (ms[14]) begin
        m = {ms[14:2], ms[1] | ms[0]};
        e = e + 1;
      end else begin
        m = ms[13:0];
      end
    end else begin
      ms = mx - my;
      if (ms == 15'd0) return 16'h0000;
      for (int i = 0; i < 14; i++) begin
        if (!ms[13]) begin
          ms = ms << 1;
          e  = e - 1;
        end
      end
      m = ms[13:0];
    end
    return fp16_pack(x[15], e, m);
  endfunction

  // a * b + c * d, the two-multiplier MAC core of the PE and the SPU.
  function automatic fp16_t fp16_dot2(input fp16_t a, input fp16_t b,
                                      input fp16_t c, input fp16_t d);
    return fp16_add(fp16_mul(a, b), fp16_mul(c, d));
  endfunction

  // Multiply by 2^n by adjusting the exponent (the "Div2 (exp-n)" block).
  function automatic fp16_t fp16_scale2(input fp16_t a, input int n);
    int e;
    if (fp16_is_zero(a)) return {a[15], 15'd0};
    e = int'(a[14:10]) + n;
    if (e <= 0) return {a[15], 15'd0};
    if (e >= 31) return {a[15], 5'h1f, 10'd0};
    return {a[15], e[4:0], a[9:0]};
  endfunction

  // Exact FP16 value of n * 2^sh for a small signed integer n (|n| < 2048).
  function automatic fp16_t fp16_from_int(input int n, input int sh);
    logic        s;
    int          e;
    logic [10:0] m;
    if (n == 0) return FP16_ZERO;
    s   = n < 0;
    e   = 10;
    m   = 11'(s ? -n : n);
    for (int i = 0; i < 11; i++) begin
      if (!m[10]) begin
        m = m << 1;
        e = e - 1;
      end
    end
    return {s, 5'(e + 15 + sh), m[9:0]};
  endfunction

  function automatic fp16_t fp16_relu(input fp16_t a);
    return a[15] ? FP16_ZERO : a;
  endfunction

endpackage
