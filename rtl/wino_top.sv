// wino_top: pipelined, parallel F(3x3,3x3) Winograd convolution engine.
//
// Dataflow (one 5x5 input tile per clock, no stalls):
//   image buffer --d--> data transform (U = B^T d B, computed once) --U--> P PEs
//   kernel buffer --V (one 25-word tile per PE)--------------------------> P PEs
//   PE p: Y = A^T [U (.) V_p] A  -->  accumulation buffer p (sum over C channels)
// Every PE sees the same U in the same clock but its own kernel V_p, so P output
// channels are produced in parallel, 9*P results per clock before accumulation. A
// pass covers num_pos tile positions x num_ch channels and takes num_pos*num_ch clocks
// plus the pipeline depth D_p = 6: buffer read 1, data transform 1, PE 3,
// accumulation 1. For every tile position, out_valid pulses once with the P finished
// 3x3 output tiles (out_tiles[p] belongs to kernel p, row-major) and their position.
// The buffers' fill ports are brought out: tiles and precomputed V = G g G^T are
// supplied from outside, into the bank not being read, then exchanged with *_swap
// while the engine is idle. P = 28 follows the design's F(3x3,3x3) configuration
// (700 multipliers / 25 per PE); buffer depths and the control are this design's own.
module wino_top
  import wino_pkg::*;
#(
  parameter int unsigned P         = 28,
  parameter int unsigned IMG_DEPTH = 4096,
  parameter int unsigned C_MAX     = 512,
  localparam int unsigned IAW = $clog2(IMG_DEPTH),
  localparam int unsigned KAW = $clog2(C_MAX)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // image buffer fill port: one 5x5 tile per word, address pos*C + c
  input  logic                   img_wr_en,
  input  logic [IAW-1:0]         img_wr_addr,
  input  dtile_t                 img_wr_data,
  input  logic                   img_swap,
  // kernel buffer fill port: V tiles of all P kernels for one channel c (address c)
  input  logic                   ker_wr_en,
  input  logic [KAW-1:0]         ker_wr_addr,
  input  dtile_t [P-1:0]         ker_wr_data,
  input  logic                   ker_swap,
  // pass control
  input  logic                   start,
  input  logic [KAW:0]           num_ch,
  input  logic [IAW:0]           num_pos,
  output logic                   busy,
  output logic                   img_bank,   // image bank now read by the engine
  output logic                   ker_bank,   // kernel bank now read by the engine
  // results
  output logic                   out_valid,
  output logic [POS_W-1:0]       out_pos,
  output otile_t [P-1:0]         out_tiles
);

  logic           img_rd_en, ker_rd_en;
  logic [IAW-1:0] img_rd_addr;
  logic [KAW-1:0] ker_rd_addr;
  ctl_t           ctl_rd, ctl_u;
  dtile_t         d_tile, u_tile;
  dtile_t [P-1:0] v_tiles, v_q;

  wino_controller #(.IMG_DEPTH(IMG_DEPTH), .C_MAX(C_MAX)) u_ctrl (
    .clk, .rst_n, .start, .num_ch, .num_pos, .busy,
    .img_rd_en, .img_rd_addr, .ker_rd_en, .ker_rd_addr, .ctl(ctl_rd));

  wino_pingpong_buf #(.WIDTH($bits(dtile_t)), .DEPTH(IMG_DEPTH)) u_img_buf (
    .clk, .rst_n, .swap(img_swap), .wr_en(img_wr_en), .wr_addr(img_wr_addr),
    .wr_data(img_wr_data), .rd_en(img_rd_en), .rd_addr(img_rd_addr),
    .rd_data(d_tile), .rd_bank(img_bank));

  wino_pingpong_buf #(.WIDTH(P*$bits(dtile_t)), .DEPTH(C_MAX)) u_ker_buf (
    .clk, .rst_n, .swap(ker_swap), .wr_en(ker_wr_en), .wr_addr(ker_wr_addr),
    .wr_data(ker_wr_data), .rd_en(ker_rd_en), .rd_addr(ker_rd_addr),
    .rd_data(v_tiles), .rd_bank(ker_bank));

  wino_data_transform u_dt (
    .clk, .rst_n, .in_ctl(ctl_rd), .d(d_tile), .out_ctl(ctl_u), .u(u_tile));

  // the kernel word is held one clock so V meets its U at the PE inputs
  always_ff @(posedge clk) begin
    if (ctl_rd.valid) v_q <= v_tiles;
  end

  ctl_t   [P-1:0] ctl_pe;
  otile_t [P-1:0] y_pe;
  logic   [P-1:0] acc_valid;
  logic   [P-1:0][POS_W-1:0] acc_pos;

  for (genvar p = 0; p < P; p++) begin : g_pe
    wino_pe u_pe (
      .clk, .rst_n, .in_ctl(ctl_u), .u(u_tile), .v(v_q[p]),
      .out_ctl(ctl_pe[p]), .y(y_pe[p]));
    wino_accum u_acc (
      .clk, .rst_n, .in_ctl(ctl_pe[p]), .y(y_pe[p]),
      .out_valid(acc_valid[p]), .out_pos(acc_pos[p]), .acc_out(out_tiles[p]));
  end

  // all PEs run in lock step, so PE 0 speaks for all of them
  assign out_valid = acc_valid[0];
  assign out_pos   = acc_pos[0];

  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    (acc_valid == '0) || (acc_valid == '1));
  a_swap_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (img_swap || ker_swap) |-> !busy);

endmodule
