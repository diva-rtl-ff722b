// fp_pkg: floating-point arithmetic shared by the PE array and the
// post-processing unit.
//
// The datapath multiplies BF16 operands and accumulates in FP32. A BF16 value
// is the upper half of an FP32 word, so the product of two BF16 values has at
// most 16 significant bits and is exact in FP32; only the accumulation rounds.
// Both operations here are combinational functions:
//   fp32_mul(a, b)  FP32 x FP32, one rounding (round to nearest, ties to even)
//   fp32_add(a, b)  FP32 + FP32, one rounding (round to nearest, ties to even)
//   bf16_to_fp32(x) zero-extends the mantissa
// Simplifications (this design's choice): subnormal inputs and results are
// flushed to zero, results too large for FP32 saturate to infinity, and NaN or
// infinity inputs are not given special treatment.
package fp_pkg;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;

  function automatic fp32_t bf16_to_fp32(input bf16_t x);
    return {x, 16'h0000};
  endfunction

  // Round a 24-bit significand (hidden bit at [23]) with guard and sticky bits
  // and pack the result; e is the biased exponent before rounding.
  function automatic fp32_t fp32_round_pack(input logic s, input int e,
                                            input logic [23:0] m,
                                            input logic g, input logic st);
    logic [24:0] mr;
    int          er;
    mr = {1'b0, m} + {24'd0, g & (st | m[0])};
    er = e;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er <= 0)   return {s, 31'h0};             // flush to zero
    if (er >= 255) return {s, 8'hff, 23'h0};      // overflow to infinity
    return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [23:0] ma, mb;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'h0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp32_round_pack(s, e + 1, p[47:24], p[23], |p[22:0]);
    else       return fp32_round_pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    logic        sa, sb, st;
    logic [7:0]  ea, eb, d;
    logic [23:0] ma, mb;
    logic [49:0] fa, fb, fbx;
    logic [50:0] sum;
    int          e, lz;
    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    // order operands by magnitude: |a| >= |b|
    if ({eb, mb} > {ea, ma}) begin
      {sa, ea, ma, sb, eb, mb} = {sb, eb, mb, sa, ea, ma};
    end
    if (ma == 24'd0) return {sa & sb, 31'h0};     // both zero
    d   = ea - eb;
    fa  = {ma, 26'd0};
    fbx = {mb, 26'd0};
    if (d > 8'd49) begin
      fb = '0;
      st = (mb != 24'd0);
    end else begin
      fb = fbx >> d;
      st = |(fbx & ((50'd1 << d) - 50'd1));
    end
    fb[0] = fb[0] | st;
    if (sa == sb) sum = {1'b0, fa} + {1'b0, fb};
    else          sum = {1'b0, fa} - {1'b0, fb};
    if (sum == 51'd0) return FP32_ZERO;           // exact cancellation: +0
    e = int'(ea);
    if (sum[50]) begin
      sum = {1'b0, sum[50:1]} | {50'd0, sum[0]};
      e   = e + 1;
    end else begin
      lz = 0;
      for (int i = 49; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    return fp32_round_pack(sa, e, sum[49:26], sum[25], |sum[24:0]);
  endfunction

endpackage
