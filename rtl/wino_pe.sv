// wino_pe: processing element for the 2D algorithm F(3x3,3x3).
//
// Y = A^T [U (.) V] A for one transformed data tile U and one transformed kernel V,
// both 25 words row-major. Engine i (of five wino_engine_1d) takes row i of U and
// of V (U[5i..5i+4], V[5i..5i+4]) and returns row i of (U (.) V) A; wino_inv_2nd
// then finishes the transform down the columns. 25 multipliers per PE, one 3x3 output
// tile (9 results) per clock. Latency three clocks: m registers, 1D engine output
// registers, PE output registers. The tag in_ctl is delayed alongside; registers only
// load when a valid tile is in their stage, so idle cycles keep the datapath quiet.
module wino_pe
  import wino_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  ctl_t   in_ctl,
  input  dtile_t u,
  input  dtile_t v,
  output ctl_t   out_ctl,
  output otile_t y
);

  ctl_t ctl_q1, ctl_q2;
  fp32_t [ALPHA*M_OUT-1:0] z;

  for (genvar i = 0; i < ALPHA; i++) begin : g_eng
    vec5_t ur, vr;
    vec3_t yr;
    assign ur = u[ALPHA*i +: ALPHA];
    assign vr = v[ALPHA*i +: ALPHA];
    wino_engine_1d u_eng (.clk, .en0(in_ctl.valid), .en1(ctl_q1.valid), .u(ur), .v(vr), .y(yr));
    assign z[M_OUT*i +: M_OUT] = yr;
  end

  wino_inv_2nd u_inv (.clk, .en(ctl_q2.valid), .z(z), .y(y));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl_q1  <= CTL_IDLE;
      ctl_q2  <= CTL_IDLE;
      out_ctl <= CTL_IDLE;
    end else begin
      ctl_q1  <= in_ctl;
      ctl_q2  <= ctl_q1;
      out_ctl <= ctl_q2;
    end
  end

endmodule
