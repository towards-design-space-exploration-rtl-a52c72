// tb_wino_data_transform: checks U = B^T d B of the shared data transform stage.
// A stream of random 5x5 tiles is applied one per clock. Integer-valued tiles give
// exact results in single precision and are compared bit for bit with B^T d B worked
// out in double precision; fractional tiles are compared within a relative
// tolerance. Also checks the one-clock latency and that the tag travels with the tile.
module tb_wino_data_transform;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  localparam int NT = 400;
  logic clk = 0, rst_n = 0;
  ctl_t in_ctl, out_ctl;
  dtile_t d, u;
  int checks = 0, failures = 0, cycle = 0;
  real    ref_u [NT][25];
  real    mag_u [NT][25];
  bit     exact [NT];
  dtile_t tiles [NT];

  wino_data_transform dut (.clk, .rst_n, .in_ctl, .d, .out_ctl, .u);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    for (int t = 0; t < NT; t++) begin
      real dr [25];
      exact[t] = (t % 2 == 0);
      for (int i = 0; i < 25; i++) begin
        tiles[t][i] = exact[t] ? real_to_f32(real'($urandom_range(200, 0)) - 100.0) : rand_f32(10.0);
        dr[i] = f32_to_real(tiles[t][i]);
      end
      // U = B^T d B : U[i][j] = sum_k sum_l BT[i][k] d[k][l] BT[j][l]
      for (int i = 0; i < 5; i++)
        for (int j = 0; j < 5; j++) begin
          ref_u[t][5*i+j] = 0.0; mag_u[t][5*i+j] = 0.0;
          for (int k = 0; k < 5; k++)
            for (int l = 0; l < 5; l++) begin
              ref_u[t][5*i+j] += BT[i][k] * dr[5*k+l] * BT[j][l];
              mag_u[t][5*i+j] += ((BT[i][k] * BT[j][l] < 0) ? -1.0 : 1.0) * BT[i][k] * BT[j][l]
                                 * ((dr[5*k+l] < 0) ? -dr[5*k+l] : dr[5*k+l]);
            end
        end
    end
  end

  // drive
  initial begin
    in_ctl = CTL_IDLE; d = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      in_ctl <= '{valid: 1'b1, first: (t % 3 == 0), last: (t % 3 == 2), pos: 16'(t)};
      d      <= tiles[t];
      @(posedge clk);
    end
    in_ctl <= CTL_IDLE;
  end

  // check: tile t entered at the clock edge that starts cycle c0, U appears one clock later
  int got = 0, t, in_cycle [NT];
  always @(posedge clk) if (in_ctl.valid) in_cycle[in_ctl.pos] <= cycle;
  always @(posedge clk) begin
    if (rst_n && out_ctl.valid) begin
      t = int'(out_ctl.pos);
      checks++;
      if (cycle - in_cycle[t] != 1) begin
        failures++; $display("FAIL latency tile %0d: %0d", t, cycle - in_cycle[t]);
      end
      checks++;
      if (out_ctl.first != (t % 3 == 0) || out_ctl.last != (t % 3 == 2)) failures++;
      for (int i = 0; i < 25; i++) begin
        checks++;
        if (exact[t] ? (u[i] !== real_to_f32(ref_u[t][i])) : !close(u[i], ref_u[t][i], mag_u[t][i])) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d U%0d = %h (%f), expected %f", t, i, u[i], f32_to_real(u[i]), ref_u[t][i]);
        end
      end
      got++;
      if (got == NT) begin
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
