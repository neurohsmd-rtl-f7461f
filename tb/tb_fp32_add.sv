// tb_fp32_add: checks the single-precision adder against the double-precision
// reference model: directed cases (cancellation, rounding ties, carry-out,
// zero results, overflow, subnormal flush) and 20000 random operand pairs.
module tb_fp32_add;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] x, logic [31:0] z, logic [31:0] exp);
    a = x; b = z;
    #1;
    checks++;
    if (!feq(y, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", x, z, y, exp);
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
    int d;
    check(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000);  // 1 + 1 = 2
    check(32'hC25C_0000, 32'h425C_0000, 32'h0000_0000);  // -55 + 55 = 0
    check(32'hC28C_0000, 32'h418C_0000, to_f32(-52.5));  // -70 + 17.5
    check(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);  // 1 + 2^-24: tie, stays even
    check(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);  // tie, rounds up to even
    check(32'h3F80_0000, 32'hB380_0000, 32'h3F7F_FFFF);  // 1 - 2^-24, exact
    check(32'h4B7F_FFFF, 32'h3F80_0000, 32'h4B80_0000);  // carry out
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow to infinity
    check(32'h0000_0001, 32'h3F80_0000, 32'h3F80_0000);  // subnormal read as zero
    check(32'h0080_0001, 32'h8080_0000, 32'h0000_0000);  // result below normal range
    check(32'h44AB_4000, 32'h44AB_4000, to_f32(2740.0));
    for (int i = 0; i < 20000; i++) begin
      x = frand(90, 160);
      d = int'($urandom % 57) - 28;
      z = frand(int'(x[30:23]) + d, int'(x[30:23]) + d);
      check(x, z, fadd(x, z));
    end
    for (int i = 0; i < 2000; i++) begin
      x = frand(120, 135);
      z = {~x[31], x[30:23], 23'($urandom) & 23'h0000FF ^ x[22:0]};  // deep cancellation
      check(x, z, fadd(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
