// tb_wino_inv_2nd: checks the second-dimension inverse transform, Y = A^T Z, where
// Z is the 5x3 matrix delivered by the five 1D engines (z[3i+j] = Z[i][j]).
// One Z per clock; Y must be registered one clock later and match the reference
// (bit exact for integers, within tolerance otherwise).
module tb_wino_inv_2nd;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  localparam int NT = 400;
  logic clk = 0, en = 0, en_q = 0;
  fp32_t [14:0] z;
  otile_t y;
  int checks = 0, failures = 0, n_out = 0;
  fp32_t [14:0] zs [NT];
  real ref_y [NT][9], mag_y [NT][9];

  wino_inv_2nd dut (.clk, .en, .z, .y);
  always #5 clk = ~clk;

  initial begin
    real p;
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < 15; i++)
        zs[t][i] = (t % 2 == 0) ? real_to_f32(real'($urandom_range(100, 0)) - 50.0) : rand_f32(100.0);
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          ref_y[t][3*r+c] = 0; mag_y[t][3*r+c] = 0;
          for (int k = 0; k < 5; k++) begin
            p = AT[r][k] * f32_to_real(zs[t][3*k+c]);
            ref_y[t][3*r+c] += p;
            mag_y[t][3*r+c] += (p < 0) ? -p : p;
          end
        end
    end
    z = '0;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      z <= zs[t]; en <= 1; @(posedge clk);
    end
    en <= 0;
  end

  always @(posedge clk) en_q <= en;
  always @(posedge clk) begin
    if (en_q) begin
      for (int i = 0; i < 9; i++) begin
        checks++;
        if ((n_out % 2 == 0) ? (y[i] !== real_to_f32(ref_y[n_out][i])) : !close(y[i], ref_y[n_out][i], mag_y[n_out][i])) begin
          failures++;
          if (failures < 10) $display("FAIL %0d Y%0d = %f expected %f", n_out, i, f32_to_real(y[i]), ref_y[n_out][i]);
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
