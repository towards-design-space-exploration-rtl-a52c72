// wino_engine_1d: the 1D Winograd convolution engine F(3,3).
//
// Takes five transformed data values u (one row of U) and the five matching
// transformed kernel values v, multiplies them element-wise with five FP32
// multipliers into the m registers, then applies the 1D inverse transform A^T
// (wino_it_1d) and captures the three results in the output registers. Two register
// stages, so y is valid two clocks after u/v; a new row can enter every clock. The
// structure (multipliers, m registers, inverse transform, output registers) follows
// the design's drawing of its 1D engine; the data transform is deliberately not in
// here but shared in front of all PEs.
module wino_engine_1d
  import wino_pkg::*;
(
  input  logic  clk,
  input  logic  en0,   // load the m registers
  input  logic  en1,   // load the output registers
  input  vec5_t u,
  input  vec5_t v,
  output vec3_t y
);

  vec5_t prod, m_q;
  vec3_t y_next;

  for (genvar i = 0; i < ALPHA; i++) begin : g_mul
    fp32_mul u_mul (.a(u[i]), .b(v[i]), .y(prod[i]));
  end

  wino_it_1d u_it (.m(m_q), .y(y_next));

  always_ff @(posedge clk) begin
    if (en0) m_q <= prod;
    if (en1) y   <= y_next;
  end

endmodule
