// fp32_mul: combinational IEEE754 single-precision multiplier, y = a * b.
//
// Used for the pixel-to-current and spike-to-current conversions, for R*I and
// for the Euler factor dt/tau. The 24x24-bit mantissa product is normalised
// by at most one place and rounded to nearest, ties to even.
//
// Own choices, not fixed by the source: subnormal inputs are read as zero,
// results below the normal range flush to a signed zero, results above it
// become infinity; infinities and NaNs are not treated specially.
//
// Interface: a, b, y are fp32 bit patterns. Timing: purely combinational.
module fp32_mul
  import nhsmd_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb, mant;
  logic [47:0] p;
  logic signed [9:0] e;
  logic        g, st;
  logic [24:0] mant_r;

  always_comb begin
    sy = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = signed'({2'b00, ea}) + signed'({2'b00, eb}) - 10'sd127;
    if (p[47]) begin
      mant = p[47:24]; g = p[23]; st = |p[22:0];
      e = e + 10'sd1;
    end else begin
      mant = p[46:23]; g = p[22]; st = |p[21:0];
    end
    mant_r = {1'b0, mant} + {24'd0, g & (st | mant[0])};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 10'sd1;
    end

    if (ea == 8'd0 || eb == 8'd0 || e <= 10'sd0) y = {sy, 31'd0};
    else if (e >= 10'sd255)                      y = {sy, 8'hFF, 23'd0};
    else                                         y = {sy, e[7:0], mant_r[22:0]};
  end

endmodule
