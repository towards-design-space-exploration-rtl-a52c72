// tb_wino_pe: end-to-end check of one F(3x3,3x3) processing element.
// For random 5x5 data tiles d and 3x3 kernels g, the testbench forms U = B^T d B and
// V = G g G^T in double precision (rounded to single), streams one (U, V) pair per
// clock into the PE, and compares the 3x3 result with direct spatial correlation
// Y[i][j] = sum_{u,v} d[i+u][j+v] g[u][v], within a relative tolerance. Checks the
// three-clock latency and one output tile per clock under a continuous stream.
module tb_wino_pe;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  localparam int NT = 300;
  logic clk = 0, rst_n = 0;
  ctl_t in_ctl, out_ctl;
  dtile_t u, v;
  otile_t y;
  int checks = 0, failures = 0, cycle = 0, n_out = 0, t_out;
  dtile_t us [NT], vs [NT];
  real ref_y [NT][9], mag_y [NT][9];
  int in_cycle [NT];

  wino_pe dut (.clk, .rst_n, .in_ctl, .u, .v, .out_ctl, .y);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    real dd [25], gg [9], s, pm;
    logic [31:0] vt [25];
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < 25; i++) dd[i] = f32_to_real(rand_f32(4.0));
      for (int i = 0; i < 9; i++)  gg[i] = f32_to_real(rand_f32(1.0));
      for (int i = 0; i < 5; i++)
        for (int j = 0; j < 5; j++) begin
          s = 0;
          for (int k = 0; k < 5; k++)
            for (int l = 0; l < 5; l++) s += BT[i][k] * dd[5*k+l] * BT[j][l];
          us[t][5*i+j] = real_to_f32(s);
        end
      filter_transform(gg, vt);
      for (int i = 0; i < 25; i++) vs[t][i] = vt[i];
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) begin
          ref_y[t][3*i+j] = 0; mag_y[t][3*i+j] = 0;
          for (int a = 0; a < 3; a++)
            for (int b = 0; b < 3; b++) begin
              pm = dd[5*(i+a) + (j+b)] * gg[3*a+b];
              ref_y[t][3*i+j] += pm;
              mag_y[t][3*i+j] += (pm < 0) ? -pm : pm;
            end
          // Winograd intermediates are larger than the direct products: widen the bound
          mag_y[t][3*i+j] = mag_y[t][3*i+j] * 10.0 + 1.0e-3;
        end
    end
    in_ctl = CTL_IDLE; u = '0; v = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      in_ctl <= '{valid: 1'b1, first: 1'b0, last: 1'b0, pos: 16'(t)};
      u <= us[t]; v <= vs[t];
      @(posedge clk);
    end
    in_ctl <= CTL_IDLE;
  end

  // the clock edge that samples a tile into the PE
  always @(posedge clk) if (in_ctl.valid) in_cycle[in_ctl.pos] <= cycle;

  int last_out_cycle = -1;
  always @(posedge clk) begin
    if (rst_n && out_ctl.valid) begin
      t_out = int'(out_ctl.pos);
      checks++;
      if (t_out != n_out || cycle - in_cycle[t_out] != 3) begin
        failures++; $display("FAIL order/latency: tile %0d latency %0d", t_out, cycle - in_cycle[t_out]);
      end
      if (last_out_cycle >= 0) begin
        checks++;
        if (cycle != last_out_cycle + 1) begin failures++; $display("FAIL gap in output stream"); end
      end
      last_out_cycle = cycle;
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (!close(y[i], ref_y[t_out][i], mag_y[t_out][i])) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d Y%0d = %f expected %f", t_out, i, f32_to_real(y[i]), ref_y[t_out][i]);
        end
      end
      n_out++;
      if (n_out == NT) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (NT + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
