// tb_fp32_mul: checks the single-precision multiplier against the
// double-precision reference (exact for products of two singles, then rounded
// once): directed cases including the kernel's own constants, overflow and
// underflow, and 20000 random operand pairs.
module tb_fp32_mul;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] x, logic [31:0] z, logic [31:0] exp);
    a = x; b = z;
    #1;
    checks++;
    if (!feq(y, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", x, z, y, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, z;
    check(32'h437F_0000, 32'h418C_0000, to_f32(255.0 * 17.5));  // pixel 255 * p2c
    check(32'h4040_0000, 32'h44AB_4000, to_f32(3.0 * 1370.0));  // 3 spikes * s2c
    check(32'hC25C_0000, 32'h3F80_0000, 32'hC25C_0000);          // x * 1
    check(32'h3F80_0000, 32'h0000_0000, 32'h0000_0000);          // x * 0
    check(32'h7F00_0000, 32'h4000_0000, 32'h7F80_0000);          // overflow
    check(32'h0100_0000, 32'h3E80_0000, 32'h0000_0000);          // underflow flush
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF, to_f32(from_f32(32'h3FFF_FFFF) ** 2));
    for (int i = 0; i < 20000; i++) begin
      x = frand(64, 190);
      z = frand(64, 190);
      check(x, z, fmul(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
