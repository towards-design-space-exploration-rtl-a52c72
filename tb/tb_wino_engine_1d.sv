// tb_wino_engine_1d: checks the 1D engine F(3,3): y = A^T (u .* v).
// One (u, v) pair enters per clock; y must appear two clocks later and match the
// double-precision reference (bit for bit for small integers, within tolerance for
// fractions). The 1D result is also compared with direct 1D correlation: with
// u = B^T d and v = G g, y[i] = sum_k d[i+k] g[k].
module tb_wino_engine_1d;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  localparam int NT = 400;
  logic clk = 0;
  logic en0 = 0, en1 = 0;
  vec5_t u, v;
  vec3_t y;
  int checks = 0, failures = 0;
  vec5_t us [NT], vs [NT];
  real   ref_y [NT][3], mag_y [NT][3];
  bit    exact [NT];

  wino_engine_1d dut (.clk, .en0, .en1, .u, .v, .y);
  always #5 clk = ~clk;

  initial begin
    for (int t = 0; t < NT; t++) begin
      exact[t] = (t % 2 == 0);
      if (t % 4 == 1) begin
        // derived from a real 1D correlation problem
        real dd [5], gg [3], uu, vv, p;
        for (int i = 0; i < 5; i++) dd[i] = f32_to_real(rand_f32(4.0));
        for (int i = 0; i < 3; i++) gg[i] = f32_to_real(rand_f32(1.0));
        for (int i = 0; i < 5; i++) begin
          uu = 0; vv = 0;
          for (int k = 0; k < 5; k++) uu += BT[i][k] * dd[k];
          for (int k = 0; k < 3; k++) vv += GM[i][k] * gg[k];
          us[t][i] = real_to_f32(uu); vs[t][i] = real_to_f32(vv);
        end
        for (int i = 0; i < 3; i++) begin
          ref_y[t][i] = 0; mag_y[t][i] = 0;
          for (int k = 0; k < 3; k++) begin
            ref_y[t][i] += dd[i+k] * gg[k];
            mag_y[t][i] += ((dd[i+k] * gg[k] < 0) ? -1 : 1) * dd[i+k] * gg[k] * 8.0;
          end
        end
      end else begin
        real p;
        for (int i = 0; i < 5; i++) begin
          us[t][i] = exact[t] ? real_to_f32(real'($urandom_range(60, 0)) - 30.0) : rand_f32(10.0);
          vs[t][i] = exact[t] ? real_to_f32(real'($urandom_range(60, 0)) - 30.0) : rand_f32(10.0);
        end
        for (int i = 0; i < 3; i++) begin
          ref_y[t][i] = 0; mag_y[t][i] = 0;
          for (int k = 0; k < 5; k++) begin
            p = f32_to_real(us[t][k]) * f32_to_real(vs[t][k]);
            ref_y[t][i] += AT[i][k] * p;
            mag_y[t][i] += ((AT[i][k] * p < 0) ? -1 : 1) * AT[i][k] * p;
          end
        end
      end
    end
  end

  // inputs change after each edge; en0 marks a valid pair, en1 follows one clock later
  int n_in = 0, n_out = 0;
  initial begin
    u = '0; v = '0;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      u <= us[t]; v <= vs[t]; en0 <= 1; @(posedge clk);
    end
    en0 <= 0;
  end
  always @(posedge clk) en1 <= en0;
  logic en2 = 0;
  always @(posedge clk) en2 <= en1;

  always @(posedge clk) begin
    if (en2) begin
      for (int i = 0; i < 3; i++) begin
        checks++;
        if ((exact[n_out] && n_out % 4 != 1) ? (y[i] !== real_to_f32(ref_y[n_out][i]))
                                             : !close(y[i], ref_y[n_out][i], mag_y[n_out][i])) begin
          failures++;
          if (failures < 10) $display("FAIL pair %0d y%0d = %f expected %f", n_out, i, f32_to_real(y[i]), ref_y[n_out][i]);
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
    repeat (NT + 50) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
