// wino_controller: sequencer for one pass of the convolution engine.
//
// A pass convolves num_pos tile positions, each over num_ch input channels, with the
// P kernels currently in the kernel buffer. After 'start' the controller issues one
// read per clock, channel-innermost: image tile at address pos*num_ch + c, kernel word
// at address c. The tag ctl (valid, first = channel 0, last = channel num_ch-1, pos)
// is registered so that it arrives together with the read data, one clock after the
// read. There are no stalls: the buffers are double-buffered and assumed to be
// refilled in time, so a pass takes exactly num_pos*num_ch issue clocks. busy is high
// from start until the last read is issued. This controller is this design's own; the
// design only fixes one tile per clock and accumulation over C consecutive clocks.
module wino_controller
  import wino_pkg::*;
#(
  parameter int unsigned IMG_DEPTH = 4096,
  parameter int unsigned C_MAX     = 512,
  localparam int unsigned IAW = $clog2(IMG_DEPTH),
  localparam int unsigned KAW = $clog2(C_MAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [KAW:0]   num_ch,    // C, 1..C_MAX
  input  logic [IAW:0]   num_pos,   // tile positions, 1..IMG_DEPTH/C
  output logic           busy,
  output logic           img_rd_en,
  output logic [IAW-1:0] img_rd_addr,
  output logic           ker_rd_en,
  output logic [KAW-1:0] ker_rd_addr,
  output ctl_t           ctl
);

  logic [KAW:0]   ch_q, nch_q;
  logic [IAW:0]   pos_q, npos_q;
  logic [IAW-1:0] addr_q;
  logic           last_ch, last_pos;

  assign last_ch  = (ch_q  == nch_q  - 1'b1);
  assign last_pos = (pos_q == npos_q - 1'b1);

  assign img_rd_en   = busy;
  assign img_rd_addr = addr_q;
  assign ker_rd_en   = busy;
  assign ker_rd_addr = ch_q[KAW-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      ch_q   <= '0;
      pos_q  <= '0;
      addr_q <= '0;
      nch_q  <= '0;
      npos_q <= '0;
      ctl    <= CTL_IDLE;
    end else begin
      // tag for the read issued in this clock, seen with the data one clock later
      ctl.valid <= busy;
      ctl.first <= busy && (ch_q == '0);
      ctl.last  <= busy && last_ch;
      ctl.pos   <= POS_W'(pos_q);
      if (!busy) begin
        if (start && num_ch != '0 && num_pos != '0) begin
          busy   <= 1'b1;
          nch_q  <= num_ch;
          npos_q <= num_pos;
          ch_q   <= '0;
          pos_q  <= '0;
          addr_q <= '0;
        end
      end else begin
        addr_q <= addr_q + 1'b1;
        if (last_ch) begin
          ch_q <= '0;
          if (last_pos) busy  <= 1'b0;
          else          pos_q <= pos_q + 1'b1;
        end else begin
          ch_q <= ch_q + 1'b1;
        end
      end
    end
  end

  a_pass_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (num_ch <= (KAW+1)'(C_MAX)) && (32'(num_ch) * 32'(num_pos) <= IMG_DEPTH));

endmodule
