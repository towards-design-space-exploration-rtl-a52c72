// wino_pingpong_buf: double-buffered (ping-pong) on-chip buffer.
//
// Two banks of DEPTH words of WIDTH bits. The engine reads one bank while the outside
// world fills the other; a one-clock pulse on 'swap' exchanges their roles, so a new
// data set can be loaded while the current one is being processed. Reads are
// synchronous: rd_data holds the word at rd_addr of the read bank one clock after
// rd_en. Used twice in the engine: as the image buffer (one 5x5 input tile per word)
// and as the kernel buffer (the transformed kernels V of all PEs for one input channel
// per word). Double buffering at both buffers is what the design assumes; the word
// organisation, depths and the swap handshake are this design's own choices.
module wino_pingpong_buf #(
  parameter int unsigned WIDTH = 800,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             swap,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_bank
);

  logic [WIDTH-1:0] mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n)    rd_bank <= 1'b0;
    else if (swap) rd_bank <= ~rd_bank;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[~rd_bank][wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_bank][rd_addr];
  end

  // the banks must not be exchanged while a read is in flight
  a_no_swap_during_read: assert property (@(posedge clk) disable iff (!rst_n) !(swap && rd_en));

endmodule
