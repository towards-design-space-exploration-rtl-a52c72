// tb_fp32_add: self-checking test of the single-precision adder.
// Random operands over a wide exponent range (both signs, so additions and
// cancelling subtractions), plus directed cases: x + (-x) = +0, adding zero, large
// exponent gaps, ties in rounding and infinities. Each result must equal, bit for
// bit, the double-precision sum rounded to single (fp_ref_pkg).
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] exp_y);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  function automatic logic [31:0] rnd_op();
    // exponent kept away from the ends of the range so results stay normal
    return {1'(($urandom)), 8'($urandom_range(150, 100)), 23'($urandom)};
  endfunction

  initial begin
    logic [31:0] x, z;
    for (int i = 0; i < 20000; i++) begin
      x = rnd_op();
      z = (i % 4 == 0) ? {x[31] ^ 1'b1, x[30:23], 23'($urandom)} : rnd_op();   // near-cancellation
      check(x, z, real_to_f32(f32_to_real(x) + f32_to_real(z)));
    end
    check(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);   // 1 - 1 = +0
    check(32'h4049_0FDB, 32'h0000_0000, 32'h4049_0FDB);   // pi + 0
    check(32'h0000_0000, 32'hC000_0000, 32'hC000_0000);   // 0 + -2
    check(32'h4B80_0000, 32'h3F80_0000, 32'h4B80_0000);   // 2^24 + 1: tie, to even
    check(32'h4B80_0000, 32'h4000_0000, 32'h4B80_0001);   // 2^24 + 2
    check(32'h4B80_0001, 32'h3F80_0000, 32'h4B80_0002);   // tie rounds up to even
    check(32'h5000_0000, 32'h3F80_0000, 32'h5000_0000);   // large gap
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);   // inf + 1
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);   // overflow
    check(32'h3FC0_0000, 32'h3FC0_0000, 32'h4040_0000);   // 1.5 + 1.5 = 3
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
