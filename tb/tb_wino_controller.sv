// tb_wino_controller: checks the pass sequencer.
// For several (num_pos, num_ch) pairs, including one channel only, it checks that one
// read is issued every clock, channel innermost, with image address pos*C + c and
// kernel address c; that the tag seen one clock later carries first/last/pos of that
// read; and that a pass takes exactly num_pos*num_ch issue clocks.
module tb_wino_controller;
  import wino_pkg::*;
  localparam int IMG_DEPTH = 256, C_MAX = 16;
  logic clk = 0, rst_n = 0, start = 0, busy;
  logic [$clog2(C_MAX):0] num_ch = '0;
  logic [$clog2(IMG_DEPTH):0] num_pos = '0;
  logic img_rd_en, ker_rd_en;
  logic [$clog2(IMG_DEPTH)-1:0] img_rd_addr;
  logic [$clog2(C_MAX)-1:0] ker_rd_addr;
  ctl_t ctl;
  int checks = 0, failures = 0;

  wino_controller #(.IMG_DEPTH(IMG_DEPTH), .C_MAX(C_MAX)) dut (.clk, .rst_n, .start, .num_ch, .num_pos, .busy,
    .img_rd_en, .img_rd_addr, .ker_rd_en, .ker_rd_addr, .ctl);
  always #5 clk = ~clk;

  task automatic run_pass(int np, int nc);
    int n_issue = 0, e_pos, e_ch, prev_pos, prev_ch;
    bit have_prev = 0;
    num_ch <= ($clog2(C_MAX)+1)'(nc); num_pos <= ($clog2(IMG_DEPTH)+1)'(np); start <= 1;
    @(posedge clk);
    start <= 0;
    #1;
    while (busy) begin
      e_pos = n_issue / nc; e_ch = n_issue % nc;
      checks++;
      if (!img_rd_en || !ker_rd_en || int'(img_rd_addr) != e_pos * nc + e_ch || int'(ker_rd_addr) != e_ch) begin
        failures++;
        if (failures < 10) $display("FAIL issue %0d: img %0d ker %0d", n_issue, img_rd_addr, ker_rd_addr);
      end
      if (have_prev) begin
        checks++;
        if (!ctl.valid || ctl.first != (prev_ch == 0) || ctl.last != (prev_ch == nc - 1) || int'(ctl.pos) != prev_pos) begin
          failures++; $display("FAIL tag after issue %0d", n_issue - 1);
        end
      end
      prev_pos = e_pos; prev_ch = e_ch; have_prev = 1;
      n_issue++;
      @(posedge clk); #1;
    end
    checks++;
    if (!ctl.valid || !ctl.last || int'(ctl.pos) != np - 1) begin failures++; $display("FAIL final tag"); end
    checks++;
    if (n_issue != np * nc) begin failures++; $display("FAIL pass took %0d clocks, expected %0d", n_issue, np * nc); end
    @(posedge clk); #1;
    checks++;
    if (ctl.valid || img_rd_en) begin failures++; $display("FAIL activity after pass"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_pass(5, 3);
    run_pass(4, 1);
    run_pass(1, 16);
    run_pass(16, 16);
    run_pass(7, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
