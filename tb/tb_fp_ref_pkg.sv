// tb_fp_ref_pkg: reference arithmetic for the testbenches.
//
// Works on FP32 bit patterns through the simulator's double-precision reals,
// independently of the RTL: exact products and sums are formed in double and
// rounded once to FP32 (round to nearest even) by real_to_fp32.  Subnormals
// are flushed to zero, matching the datapath's documented behaviour.  The MBM
// reference evaluates the two cases of the Mitchell/MBM formula directly.
// A compressed bfloatX value is passed as its FP32 expansion (mantissa LSBs
// zero), which has the same numerical value.
package tb_fp_ref_pkg;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp32_to_real(logic [31:0] a);
    real m;
    if (a[30:23] == 8'd0) return 0.0;
    m = 1.0 + $itor(a[22:0]) / 8388608.0;
    m = m * pow2(int'(a[30:23]) - 127);
    return a[31] ? -m : m;
  endfunction

  // Round a double to FP32, nearest even; subnormal results flush to +-0.
  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] d;
    int          e;
    logic [52:0] m;
    logic [23:0] mr;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mr = m[52:29];
    g  = m[28];
    st = |m[27:0];
    if (g && (st || mr[0])) mr = mr + 24'd1;
    if (mr == 24'd0) begin       // carried out of 24 bits
      mr = 24'h800000;
      e  = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    real s;
    logic [31:0] y;
    s = fp32_to_real(a) + fp32_to_real(b);
    y = real_to_fp32(s);
    if (y[30:0] == 31'd0) y = 32'd0;   // flushed or cancelled results are +0
    return y;
  endfunction

  // Exact multiply of two values (FP32 expansions of compressed operands).
  function automatic logic [31:0] ref_mul_exact(logic [31:0] a, logic [31:0] b);
    logic [31:0] y;
    if (a[30:23] == 0 || b[30:23] == 0) return {a[31] ^ b[31], 31'd0};
    y = real_to_fp32(fp32_to_real(a) * fp32_to_real(b));
    return y;
  endfunction

  // MBM approximate multiply; mant_w = stored mantissa bits, c = correction.
  function automatic logic [31:0] ref_mul_mbm(logic [31:0] a, logic [31:0] b,
                                              int mant_w, real c);
    real x1, x2, m, v;
    int  e;
    if (a[30:23] == 0 || b[30:23] == 0) return {a[31] ^ b[31], 31'd0};
    x1 = $itor(a[22:0] >> (23 - mant_w)) / pow2(mant_w);
    x2 = $itor(b[22:0] >> (23 - mant_w)) / pow2(mant_w);
    if (x1 + x2 < 1.0) m = 1.0 + x1 + x2 + c;
    else               m = 2.0 * (x1 + x2 + c / 2.0);
    e = int'(a[30:23]) + int'(b[30:23]) - 254;
    v = m * pow2(e);
    if (a[31] ^ b[31]) v = -v;
    return real_to_fp32(v);
  endfunction

  // FP32 value truncated to mant_w mantissa bits (the compressed format).
  function automatic logic [31:0] trunc_fp32(logic [31:0] a, int mant_w);
    logic [31:0] mask;
    mask = 32'hffff_ffff << (23 - mant_w);
    return a & mask;
  endfunction

  // Random normal FP32 with exponent in [emin, emax].
  function automatic logic [31:0] rand_fp32(int emin, int emax);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(emin + ($urandom % (emax - emin + 1)));
    return r;
  endfunction

endpackage
