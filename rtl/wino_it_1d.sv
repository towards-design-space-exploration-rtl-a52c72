// wino_it_1d: one-dimensional Winograd inverse transform y = A^T m for F(3,3).
//
//     A^T = [ 1  1  1  1  0 ]
//           [ 0  1 -1  2  0 ]
//           [ 0  1  1  4  1 ]
// Built as in the 1D engine drawing of the design: m1+m2 and m1-m2 are formed once,
// m3 is scaled by 2 and by 4 (exponent increments), and
//   y0 = (m0 + m3) + (m1 + m2)
//   y1 = (m1 - m2) + 2 m3
//   y2 = (m1 + m2) + (4 m3 + m4)
// Seven FP32 adders, combinational. Used in every 1D engine (wino_engine_1d) and three
// times in the second-dimension inverse transform (wino_inv_2nd).
module wino_it_1d
  import wino_pkg::*;
(
  input  vec5_t m,
  output vec3_t y
);

  fp32_t s03, s12, d12, m3x2, m3x4, s34;

  assign m3x2 = fp_pow2(m[3], 1);
  assign m3x4 = fp_pow2(m[3], 2);

  fp32_add a_s03 (.a(m[0]), .b(m[3]),         .y(s03));
  fp32_add a_s12 (.a(m[1]), .b(m[2]),         .y(s12));
  fp32_add a_d12 (.a(m[1]), .b(fp_neg(m[2])), .y(d12));
  fp32_add a_y0  (.a(s03),  .b(s12),          .y(y[0]));
  fp32_add a_y1  (.a(d12),  .b(m3x2),         .y(y[1]));
  fp32_add a_s34 (.a(m3x4), .b(m[4]),         .y(s34));
  fp32_add a_y2  (.a(s12),  .b(s34),          .y(y[2]));

endmodule
