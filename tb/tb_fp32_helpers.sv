// tb_fp32_helpers: self-checking test of the two small single-precision
// helpers, fp32_from_uint and fp32_ge.
//   * fp32_from_uint is checked exhaustively over every 16-bit count against
//     the reference conversion of the same integer.
//   * fp32_ge is checked on directed cases (+0 against -0, subnormals read as
//     zero, equal values, mixed signs, the threshold -70 of the published
//     parameter set) and on 20000 random pairs, including pairs that differ in
//     the last bit only. The reference compares the real values.
// Both units are combinational; each check waits 1 time unit for the outputs.
module tb_fp32_helpers;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;

  logic [SUM_BITS-1:0] u;
  fp32_t               y;
  fp32_t               a, b;
  logic                ge;

  fp32_from_uint #(.W(SUM_BITS)) u_cvt (.u, .y);
  fp32_ge                        u_ge  (.a, .b, .ge);

  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_ge(fp32_t x, fp32_t z);
    logic exp_ge;
    a = x; b = z;
    #1;
    exp_ge = from_f32(x) >= from_f32(z);
    checks++;
    if (ge !== exp_ge) begin
      failures++;
      if (failures < 10) $display("FAIL ge(%h, %h) = %b, expected %b", x, z, ge, exp_ge);
    end
  endtask

  initial begin
    // Conversion: every count.
    for (int n = 0; n < (1 << SUM_BITS); n++) begin
      u = SUM_BITS'(n);
      #1;
      checks++;
      if (y !== to_f32(real'(n))) begin
        failures++;
        if (failures < 10) $display("FAIL from_uint(%0d) = %h, expected %h", n, y, to_f32(real'(n)));
      end
    end
    // Comparison: directed cases.
    check_ge(32'h0000_0000, 32'h8000_0000);
    check_ge(32'h8000_0000, 32'h0000_0000);
    check_ge(32'h0000_0001, 32'h8000_0000);   // subnormal against -0
    check_ge(32'h8040_0000, 32'h0000_0000);   // negative subnormal against +0
    check_ge(FP_M70, FP_M70);
    check_ge(FP_M55, FP_M70);
    check_ge(FP_M70, FP_M55);
    check_ge(FP_1_0, FP_M70);
    check_ge(FP_M70, FP_1_0);
    check_ge(FP_0_0, FP_M70);
    check_ge(FP_M70, FP_0_0);
    check_ge(FP_17_5, FP_1370);
    check_ge(FP_1370, FP_17_5);
    check_ge(32'h3F80_0001, FP_1_0);
    check_ge(FP_1_0, 32'h3F80_0001);
    check_ge(32'hBF80_0001, 32'hBF80_0000);
    check_ge(32'hBF80_0000, 32'hBF80_0001);
    // Random pairs over the whole normal range, and near-equal pairs.
    for (int k = 0; k < 10000; k++)
      check_ge(frand(1, 254), frand(1, 254));
    for (int k = 0; k < 10000; k++) begin
      fp32_t x;
      x = frand(100, 150);
      check_ge(x, x ^ 32'(($urandom % 2) ? 1 : 32'h8000_0000));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
