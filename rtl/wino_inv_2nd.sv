// wino_inv_2nd: inverse transform in the second dimension and output registers.
//
// The five 1D engines of a PE each deliver three values, z[3i..3i+2] from engine i,
// which together form the 5x3 matrix Z = (U (.) V) A. This block applies A^T down
// each of the three columns of Z (three wino_it_1d instances) to obtain the 3x3 output
// tile Y = A^T Z, row-major (y[3*row+col]), and registers it. One clock of latency.
module wino_inv_2nd
  import wino_pkg::*;
(
  input  logic                           clk,
  input  logic                           en,
  input  fp32_t [ALPHA*M_OUT-1:0]        z,
  output otile_t                         y
);

  vec5_t  col  [M_OUT];
  vec3_t  res  [M_OUT];
  otile_t y_next;

  for (genvar j = 0; j < M_OUT; j++) begin : g_col
    for (genvar i = 0; i < ALPHA; i++) begin : g_pick
      assign col[j][i] = z[M_OUT*i + j];
    end
    wino_it_1d u_it (.m(col[j]), .y(res[j]));
    for (genvar i = 0; i < M_OUT; i++) begin : g_out
      assign y_next[M_OUT*i + j] = res[j][i];
    end
  end

  always_ff @(posedge clk) begin
    if (en) y <= y_next;
  end

endmodule
