// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// The simulator has no usable shortreal, so fp32 values are modelled with
// double-precision reals: each operation is done in double and the result is
// rounded once to single precision (nearest, ties to even, subnormals flushed
// to zero, as the RTL does). Products of two singles are exact in double, and
// so are sums whose exponents differ by less than 29, so the reference is
// exact for the operands the testbenches use.
package tb_fp_pkg;

  function automatic logic [31:0] to_f32(real r);
    logic [63:0] b;
    logic [10:0] e64;
    int          e;
    logic [24:0] m;
    logic        g, st;
    b   = $realtobits(r);
    e64 = b[62:52];
    if (e64 == 11'd0) return {b[63], 31'd0};
    e  = int'(e64) - 1023 + 127;
    m  = {2'b01, b[51:29]};
    g  = b[28];
    st = |b[27:0];
    m  = m + {24'd0, g & (st | m[0])};
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    if (e <= 0)   return {b[63], 31'd0};
    return {b[63], 8'(e), m[22:0]};
  endfunction

  function automatic real from_f32(logic [31:0] f);
    logic [10:0] e64;
    if (f[30:23] == 8'd0) return 0.0;
    e64 = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e64, f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return to_f32(from_f32(a) + from_f32(b));
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return to_f32(from_f32(a) * from_f32(b));
  endfunction

  function automatic logic [31:0] fneg(logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

  // Equality that treats +0 and -0 as the same value.
  function automatic bit feq(logic [31:0] a, logic [31:0] b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b1;
    return a == b;
  endfunction

  // A random normal fp32 number with the exponent field in [emin, emax].
  function automatic logic [31:0] frand(int emin, int emax);
    int unsigned e;
    e = emin + ($urandom % (emax - emin + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
