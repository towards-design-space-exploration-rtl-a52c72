// tb_fp32_mul: self-checking test of the single-precision multiplier.
// Random operands (both signs, exponents chosen so products stay in the normal
// range) and directed cases (zero, one, rounding ties, overflow, underflow flushed
// to zero, infinity). Each result must equal the exact product rounded to single.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] exp_y);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    logic [31:0] x, z;
    for (int i = 0; i < 20000; i++) begin
      x = {1'($urandom), 8'($urandom_range(170, 85)), 23'($urandom)};
      z = {1'($urandom), 8'($urandom_range(170, 85)), 23'($urandom)};
      check(x, z, real_to_f32(f32_to_real(x) * f32_to_real(z)));
    end
    check(32'h3F80_0000, 32'h4049_0FDB, 32'h4049_0FDB);   // 1 * pi
    check(32'h0000_0000, 32'h4049_0FDB, 32'h0000_0000);   // 0 * pi
    check(32'hC000_0000, 32'h4040_0000, 32'hC0C0_0000);   // -2 * 3 = -6
    check(32'h3F80_0001, 32'h3F80_0001, 32'h3F80_0002);   // (1+u)^2 rounds to 1+2u
    check(32'h3F80_0800, 32'h3F80_0800, 32'h3F80_1000);   // (1+2^-12)^2: exact tie, to even
    check(32'h3F80_0800, 32'h3F80_1800, 32'h3F80_2002);   // (1+2^-12)(1+3*2^-12): tie on an odd LSB, rounds up
    check(32'h7F00_0000, 32'h4000_0000, 32'h7F80_0000);   // overflow
    check(32'h0080_0000, 32'h3F00_0000, 32'h0000_0000);   // underflow flushed
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);   // inf * 0 = NaN
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
