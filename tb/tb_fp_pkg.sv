// tb_fp_pkg: reference floating-point arithmetic for the testbenches.
//
// Values are widened to double precision, where the product or sum of two
// FP32 numbers is computed exactly or with an error small enough that a
// single rounding back to FP32 (round to nearest, ties to even) gives the
// correctly rounded FP32 result. Subnormals are flushed to zero and overflow
// goes to infinity, the same conventions as the design's datapath.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [10:0] e11;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    e11 = 11'(f[30:23]) - 11'd127 + 11'd1023;
    return $bitstoreal({f[31], e11, f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] bits;
    logic        s, g, st;
    logic [24:0] m;
    int          e;
    bits = $realtobits(x);
    s    = bits[63];
    if (bits[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(bits[62:52]) - 1023 + 127;
    m  = {2'b01, bits[51:29]};
    g  = bits[28];
    st = |bits[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal FP32 with a biased exponent in [emin, emax]
  function automatic logic [31:0] rand_fp32(input int emin, input int emax);
    int unsigned e;
    e = emin + ($urandom % (emax - emin + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // random BF16 with a biased exponent in [emin, emax]
  function automatic logic [15:0] rand_bf16(input int emin, input int emax);
    logic [31:0] f;
    f = rand_fp32(emin, emax);
    return f[31:16];
  endfunction

  // pairwise tree reduction in the same order as the hardware adder tree
  function automatic logic [31:0] ref_tree(input logic [31:0] v [], input int n);
    logic [31:0] t [];
    int          m;
    t = new[n];
    for (int i = 0; i < n; i++) t[i] = v[i];
    m = n;
    while (m > 1) begin
      for (int i = 0; i < m / 2; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
      m = m / 2;
    end
    return t[0];
  endfunction

endpackage
