// tb_wino_accum: checks the per-PE accumulation buffer.
// Groups of C tiles (C varies from 1 to 9, including single-channel groups where the
// first and last tags coincide) are streamed back to back, one per clock. After the
// last tile of a group the buffer must present, one clock later, the running
// single-precision sum of the group (added in channel order, so the expected value is
// exact) with out_valid for exactly one clock and the group's position tag. Idle
// clocks inside a group must not disturb the sum.
module tb_wino_accum;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  ctl_t in_ctl;
  otile_t y, acc_out;
  logic out_valid;
  logic [POS_W-1:0] out_pos;
  int checks = 0, failures = 0, n_groups = 0, n_valid = 0;
  localparam int NG = 60;
  otile_t exp_sum [NG];

  wino_accum dut (.clk, .rst_n, .in_ctl, .y, .out_valid, .out_pos, .acc_out);
  always #5 clk = ~clk;

  initial begin
    otile_t s, yt;
    int c_n;
    in_ctl = CTL_IDLE; y = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < NG; g++) begin
      c_n = (g % 9) + 1;
      for (int c = 0; c < c_n; c++) begin
        for (int i = 0; i < 9; i++) begin
          yt[i] = rand_f32(50.0);
          s[i]  = (c == 0) ? yt[i] : real_to_f32(f32_to_real(s[i]) + f32_to_real(yt[i]));
        end
        in_ctl <= '{valid: 1'b1, first: (c == 0), last: (c == c_n - 1), pos: 16'(g)};
        y <= yt;
        @(posedge clk);
        if (g % 7 == 3 && c == 0 && c_n > 1) begin   // an idle clock inside a group
          in_ctl <= CTL_IDLE; y <= '1;
          @(posedge clk);
        end
      end
      exp_sum[g] = s;
    end
    in_ctl <= CTL_IDLE;
    repeat (3) @(posedge clk);
    checks++;
    if (n_groups != NG) begin failures++; $display("FAIL %0d of %0d groups seen", n_groups, NG); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (int'(out_pos) != n_groups) begin failures++; $display("FAIL pos %0d expected %0d", out_pos, n_groups); end
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (acc_out[i] !== exp_sum[n_groups][i]) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d word %0d = %h expected %h", n_groups, i, acc_out[i], exp_sum[n_groups][i]);
        end
      end
      n_groups++;
    end
  end

  initial begin
    repeat (NG * 12 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
