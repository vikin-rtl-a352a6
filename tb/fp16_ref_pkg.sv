// fp16_ref_pkg: reference FP16 conversions for the testbenches.
//
// These work on SystemVerilog reals (IEEE double) and share no code with the
// design's integer FP16 datapath. Conventions match the design: subnormals
// read as zero, results below the smallest normal flush to zero, rounding is
// to nearest with ties to even, overflow goes to infinity.
package fp16_ref_pkg;

  function automatic real p2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real m;
    if (h[14:10] == 5'd0) return 0.0;
    m = (1024.0 + real'(h[9:0])) * p2(int'(h[14:10]) - 25);
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(input real v);
    logic s;
    real  a, f;
    int   e;
    longint m;
    if (v == 0.0) return 16'h0000;
    s = v < 0.0;
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    a = a * 1024.0;
    m = longint'($floor(a));
    f = a - real'(m);
    if (f > 0.5 || (f == 0.5 && m[0])) m++;
    if (m == 2048) begin m = 1024; e++; end
    if (e + 15 <= 0) return {s, 15'd0};
    if (e + 15 >= 31) return {s, 5'h1f, 10'd0};
    return {s, 5'(e + 15), m[9:0]};
  endfunction

  function automatic real absr(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  // A random FP16 value of magnitude 2^lo .. 2^hi, random sign.
  function automatic logic [15:0] rand_h(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo - 1));
    return {1'($urandom), 5'(e + 15), 10'($urandom)};
  endfunction

endpackage
