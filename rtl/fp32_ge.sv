// fp32_ge: combinational comparison of two fp32 numbers, ge = (a >= b).
//
// Used for the firing test (V >= threshold), the lower bound of the membrane
// potential and the "pixel > 0.0" test of the zero-skipping mode. Sign and
// magnitude are compared directly; +0 and -0 are equal and subnormals are read
// as zero, matching the adder and multiplier. NaNs are not treated specially.
//
// Interface: a, b are fp32 bit patterns. Timing: purely combinational.
module fp32_ge
  import nhsmd_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output logic  ge
);

  logic [30:0] ma, mb;

  always_comb begin
    ma = (a[30:23] == 8'd0) ? 31'd0 : a[30:0];
    mb = (b[30:23] == 8'd0) ? 31'd0 : b[30:0];
    if (ma == 31'd0 && mb == 31'd0)  ge = 1'b1;
    else if (ma == 31'd0)            ge = b[31];
    else if (mb == 31'd0)            ge = ~a[31];
    else if (a[31] != b[31])         ge = b[31];
    else if (!a[31])                 ge = (ma >= mb);
    else                             ge = (ma <= mb);
  end

endmodule
