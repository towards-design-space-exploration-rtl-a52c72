// wino_accum: accumulation buffer of one PE.
//
// A PE delivers one 3x3 tile per clock, one per input channel of the current tile
// position. This block sums those tiles over the C channels with nine FP32 adders and
// a running-sum register: the tile tagged 'first' replaces the sum, later tiles are
// added to it, and the tile tagged 'last' completes it. The completed sum is copied
// into the output register (acc_out) and out_valid is raised for one clock, with the
// tile position in out_pos; the next position can start on the very next clock, so
// there is no bubble between positions. Latency one clock after the last channel.
// Accumulation over the channels follows the design; running sum plus output register
// is this design's own choice of how to build it.
module wino_accum
  import wino_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  ctl_t             in_ctl,
  input  otile_t           y,
  output logic             out_valid,
  output logic [POS_W-1:0] out_pos,
  output otile_t           acc_out
);

  otile_t sum_q, sum_next, addend;

  for (genvar i = 0; i < M_OUT*M_OUT; i++) begin : g_add
    // the first channel adds to zero, so the sum starts from that tile exactly
    assign addend[i] = in_ctl.first ? 32'h0000_0000 : sum_q[i];
    fp32_add u_add (.a(addend[i]), .b(y[i]), .y(sum_next[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
    end else begin
      out_valid <= in_ctl.valid && in_ctl.last;
      if (in_ctl.valid && in_ctl.last) out_pos <= in_ctl.pos;
    end
    if (in_ctl.valid)                sum_q   <= sum_next;
    if (in_ctl.valid && in_ctl.last) acc_out <= sum_next;
  end

endmodule
