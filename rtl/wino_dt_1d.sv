// wino_dt_1d: one-dimensional Winograd data transform u = B^T d for F(3,3).
//
// B^T (points 0, 1, -1, 2 and infinity) is
//     [ 2 -1 -2  1  0 ]
//     [ 0 -2 -1  1  0 ]
//     [ 0  2 -3  1  0 ]
//     [ 0 -1  0  1  0 ]
//     [ 0  2 -1 -2  1 ]
// It is the data-side partner of the inverse matrix A^T used by wino_it_1d; the row
// signs are chosen so that the constant multipliers are 2x, -2x and -3x. Doubling is
// an exponent increment, 3x is x + 2x. Eleven FP32 adders with shared terms:
//   u3 = d3 - d1            u0 = (2d0 - 2d2) + u3
//   u1 = (d3 - d2) - 2d1    u2 = (d3 + 2d1) - 3d2
//   u4 = (2d1 - 2d3) + (d4 - d2)
// Combinational; used ten times (five columns, five rows) by wino_data_transform.
module wino_dt_1d
  import wino_pkg::*;
(
  input  vec5_t d,
  output vec5_t u
);

  fp32_t d0x2, d1x2, d2x2, d3x2, d2x3;
  fp32_t t_a, t_b, t_c, t_d, t_e;

  always_comb begin
    d0x2 = fp_pow2(d[0], 1);
    d1x2 = fp_pow2(d[1], 1);
    d2x2 = fp_pow2(d[2], 1);
    d3x2 = fp_pow2(d[3], 1);
  end

  fp32_add a_u3  (.a(d[3]), .b(fp_neg(d[1])), .y(u[3]));
  fp32_add a_ta  (.a(d0x2), .b(fp_neg(d2x2)), .y(t_a));
  fp32_add a_u0  (.a(t_a),  .b(u[3]),         .y(u[0]));
  fp32_add a_tb  (.a(d[3]), .b(fp_neg(d[2])), .y(t_b));
  fp32_add a_u1  (.a(t_b),  .b(fp_neg(d1x2)), .y(u[1]));
  fp32_add a_tc  (.a(d[3]), .b(d1x2),         .y(t_c));
  fp32_add a_x3  (.a(d[2]), .b(d2x2),         .y(d2x3));
  fp32_add a_u2  (.a(t_c),  .b(fp_neg(d2x3)), .y(u[2]));
  fp32_add a_td  (.a(d1x2), .b(fp_neg(d3x2)), .y(t_d));
  fp32_add a_te  (.a(d[4]), .b(fp_neg(d[2])), .y(t_e));
  fp32_add a_u4  (.a(t_d),  .b(t_e),          .y(u[4]));

endmodule
