// fp32_add: combinational IEEE754 single-precision adder, y = a + b.
//
// The kernel performs all of its arithmetic in single precision; this is the
// adder behind every membrane and current update. The larger-magnitude operand
// is kept, the other is aligned to it with guard, round and sticky bits, the
// mantissas are added or subtracted, the result is normalised and then rounded
// to nearest, ties to even.
//
// Own choices, not fixed by the source: subnormal inputs are read as zero and
// subnormal results are flushed to a signed zero; an exponent overflow gives
// infinity; infinities and NaNs are not propagated specially (the network's
// values stay far inside the normal range). An exact zero difference is +0.
//
// Interface: a, b, y are fp32 bit patterns. Timing: purely combinational.
module fp32_add
  import nhsmd_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sx, sy_;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic [7:0]  d;
  logic [26:0] mx_ext, my_ext, my_sh;
  logic [27:0] s, t;
  logic [26:0] n;
  logic signed [9:0] e;
  logic [23:0] mant;
  logic [24:0] mant_r;
  logic        g, st;
  logic [4:0]  lz;

  always_comb begin
    lz = 5'd0;
    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};

    // x: the operand of larger magnitude.
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = ea; mx = ma; sy_ = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy_ = sa; ey = ea; my = ma;
    end

    // Alignment: distances of 31 and more shift everything into the sticky bit.
    d      = ex - ey;
    mx_ext = {mx, 3'b000};
    my_ext = {my, 3'b000};
    my_sh  = shr27_sticky(my_ext, (d > 8'd31) ? 5'd31 : d[4:0]);

    if (sx == sy_) s = {1'b0, mx_ext} + {1'b0, my_sh};
    else           s = {1'b0, mx_ext} - {1'b0, my_sh};

    // Normalisation: shift the leading one to bit 27 (no shift after a carry
    // out), keep bits 27..1 and fold bit 0 into the sticky position.
    for (int i = 0; i <= 27; i++) if (s[i]) lz = 5'(27 - i);
    t = shl28(s, 5'(lz));
    n = t[27:1] | {26'd0, t[0]};
    e = signed'({2'b00, ex}) + 10'sd1 - 10'(lz);

    mant   = n[26:3];
    g      = n[2];
    st     = n[1] | n[0];
    mant_r = {1'b0, mant} + {24'd0, g & (st | mant[0])};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 10'sd1;
    end

    if (s == 28'd0 || mx == 24'd0 && my == 24'd0) begin
      y = (sx & sy_) ? 32'h8000_0000 : 32'h0000_0000;
    end else if (e >= 10'sd255) begin
      y = {sx, 8'hFF, 23'd0};
    end else if (e <= 10'sd0) begin
      y = {sx, 31'd0};
    end else begin
      y = {sx, e[7:0], mant_r[22:0]};
    end
  end

endmodule
