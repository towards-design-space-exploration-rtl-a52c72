// wino_data_transform: the shared data transform stage, U = B^T d B.
//
// One 5x5 input tile d (row-major, d[5*row+col]) enters per clock; its transform U
// is computed combinationally as two passes of the 1D transform (wino_dt_1d): first
// down each of the five columns (T = B^T d), then along each of the five rows of T
// (U = T B, i.e. B^T applied to each row). U is captured in the data transform
// output registers, so the stage has one clock of latency, and the single U is fanned
// out to all P PEs by the parent. Computing U once for all PEs, instead of inside each
// PE, is the central idea of the design. The tag in_ctl is delayed with the tile.
// The split into two 1D passes inside one register stage is this design's choice.
module wino_data_transform
  import wino_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  ctl_t   in_ctl,
  input  dtile_t d,
  output ctl_t   out_ctl,
  output dtile_t u
);

  vec5_t col_in  [ALPHA];
  vec5_t col_out [ALPHA];
  vec5_t row_in  [ALPHA];
  vec5_t row_out [ALPHA];
  dtile_t u_next;

  for (genvar c = 0; c < ALPHA; c++) begin : g_col
    for (genvar r = 0; r < ALPHA; r++) begin : g_pick
      assign col_in[c][r] = d[ALPHA*r + c];
    end
    wino_dt_1d u_dt (.d(col_in[c]), .u(col_out[c]));
  end

  for (genvar r = 0; r < ALPHA; r++) begin : g_row
    for (genvar c = 0; c < ALPHA; c++) begin : g_pick
      assign row_in[r][c]          = col_out[c][r];
      assign u_next[ALPHA*r + c]   = row_out[r][c];
    end
    wino_dt_1d u_dt (.d(row_in[r]), .u(row_out[r]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_ctl <= CTL_IDLE;
    else        out_ctl <= in_ctl;
    if (in_ctl.valid) u <= u_next;
  end

endmodule
