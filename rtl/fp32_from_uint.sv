// fp32_from_uint: combinational conversion of an unsigned spike count to fp32.
//
// The spike sums are kept as integers and turned into single-precision values
// before they are scaled by the synaptic weight. Counts up to 2^24 convert
// exactly, so no rounding is needed for the SUM_BITS-wide counters here.
//
// Interface: u is an unsigned count, y its fp32 value. Timing: combinational.
module fp32_from_uint
  import nhsmd_pkg::*;
#(
  parameter int unsigned W = SUM_BITS
) (
  input  logic [W-1:0] u,
  output fp32_t        y
);

  int          msb;
  logic [23:0] m;
  logic [27:0] t;

  always_comb begin
    msb = 0;
    for (int i = 0; i < W; i++) if (u[i]) msb = i;
    t = shl28(28'(u), 5'(23 - msb));
    m = t[23:0];
    if (u == '0) y = 32'd0;
    else         y = {1'b0, 8'(127 + msb), m[22:0]};
  end

endmodule
