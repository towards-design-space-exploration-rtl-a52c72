// tb_wino_top_full: the engine at its default size (P = 28 PEs, 4096-tile image
// buffer, 512-channel kernel buffer). One pass fills the image buffer with 8 tile
// positions of a 512-channel input (the channel count of the deep VGG16 layers) against
// 28 kernels; a second pass uses 64 channels.
//
// The testbench builds random input feature maps (C channels of a (3*TY+2) x (3*TX+2)
// image) and P random 3x3xC kernels, cuts the maps into overlapping 5x5 tiles (stride 3)
// and writes them into the image buffer (address pos*C + c), and writes the filter
// transforms V = G g G^T (computed here in double precision, rounded to single) into
// the kernel buffer. It then runs a sequence of passes. The data of the next pass is
// written into the idle banks while the current pass runs, and the banks are swapped
// as soon as the engine is idle, so passes follow each other without waiting for the
// pipeline to drain. Every 3x3 output tile of every kernel is compared with a direct
// spatial convolution in double precision, within a relative tolerance. Timing checks:
// within a pass one tile position completes every C clocks, and the last result of a
// pass is registered N + D_p - 1 clocks after the first read (N = positions * C,
// D_p = 6), the total time T_t of the engine's timing model.
module tb_wino_top_full;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  localparam int NP = 28, IMG_DEPTH = 4096, C_MAX = 512;
  localparam int DP = 6;
  localparam int IAW = $clog2(IMG_DEPTH), KAW = $clog2(C_MAX);
  localparam int NPASS = 2;
  localparam int PASS_TY [NPASS] = '{2, 4};
  localparam int PASS_TX [NPASS] = '{4, 4};
  localparam int PASS_C  [NPASS] = '{512, 64};
  localparam int HMAX = 3 * 4 + 2, WMAX = 3 * 4 + 2, CM = 512;
  localparam bit COUNT_MECH = 0;

  logic clk = 0, rst_n = 0;
  logic img_wr_en = 0, ker_wr_en = 0, img_swap = 0, ker_swap = 0, start = 0;
  logic [IAW-1:0] img_wr_addr = '0;
  logic [KAW-1:0] ker_wr_addr = '0;
  dtile_t img_wr_data = '0;
  dtile_t [NP-1:0] ker_wr_data = '0;
  logic [KAW:0] num_ch = '0;
  logic [IAW:0] num_pos = '0;
  logic busy, img_bank, ker_bank, out_valid;
  logic [POS_W-1:0] out_pos;
  otile_t [NP-1:0] out_tiles;

  wino_top dut (
    .clk, .rst_n, .img_wr_en, .img_wr_addr, .img_wr_data, .img_swap,
    .ker_wr_en, .ker_wr_addr, .ker_wr_data, .ker_swap,
    .start, .num_ch, .num_pos, .busy, .img_bank, .ker_bank,
    .out_valid, .out_pos, .out_tiles);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;
  // mechanisms exercised
  int n_overlap_wr = 0, n_swap = 0, n_accum = 0, n_single_ch = 0, n_back_to_back = 0;

  // data of every pass: feature map and kernels (single-precision values)
  logic [31:0] fm  [NPASS][CM][HMAX][WMAX];
  logic [31:0] krn [NPASS][NP][CM][9];
  // expected results of the pass being checked
  real exp_y [NP][4 * 4][9], mag_y [NP][4 * 4][9];

  task automatic make_data(int ps);
    for (int c = 0; c < PASS_C[ps]; c++)
      for (int h = 0; h < 3 * PASS_TY[ps] + 2; h++)
        for (int w = 0; w < 3 * PASS_TX[ps] + 2; w++) fm[ps][c][h][w] = rand_f32(2.0);
    for (int k = 0; k < NP; k++)
      for (int c = 0; c < PASS_C[ps]; c++)
        for (int i = 0; i < 9; i++) krn[ps][k][c][i] = rand_f32(0.5);
  endtask

  task automatic make_expected(int ps);
    real pr;
    for (int k = 0; k < NP; k++)
      for (int ty = 0; ty < PASS_TY[ps]; ty++)
        for (int tx = 0; tx < PASS_TX[ps]; tx++)
          for (int i = 0; i < 3; i++)
            for (int j = 0; j < 3; j++) begin
              exp_y[k][ty*PASS_TX[ps]+tx][3*i+j] = 0.0;
              mag_y[k][ty*PASS_TX[ps]+tx][3*i+j] = 1.0e-3;
              for (int c = 0; c < PASS_C[ps]; c++)
                for (int a = 0; a < 3; a++)
                  for (int b = 0; b < 3; b++) begin
                    pr = f32_to_real(fm[ps][c][3*ty+i+a][3*tx+j+b]) * f32_to_real(krn[ps][k][c][3*a+b]);
                    exp_y[k][ty*PASS_TX[ps]+tx][3*i+j] += pr;
                    mag_y[k][ty*PASS_TX[ps]+tx][3*i+j] += 10.0 * ((pr < 0) ? -pr : pr);
                  end
            end
  endtask

  // write the tiles and V tiles of pass ps into the fill banks, one word per clock
  task automatic load_pass(int ps);
    int np_, nc;
    real g [9];
    logic [31:0] v [25];
    dtile_t [NP-1:0] kw;
    np_ = PASS_TY[ps] * PASS_TX[ps];
    nc  = PASS_C[ps];
    for (int c = 0; c < nc; c++) begin
      for (int k = 0; k < NP; k++) begin
        for (int i = 0; i < 9; i++) g[i] = f32_to_real(krn[ps][k][c][i]);
        filter_transform(g, v);
        for (int i = 0; i < 25; i++) kw[k][i] = v[i];
      end
      ker_wr_data <= kw;
      ker_wr_en <= 1; ker_wr_addr <= KAW'(c);
      if (busy) n_overlap_wr++;
      @(posedge clk);
    end
    ker_wr_en <= 0;
    for (int p = 0; p < np_; p++)
      for (int c = 0; c < nc; c++) begin
        for (int i = 0; i < 5; i++)
          for (int j = 0; j < 5; j++)
            img_wr_data[5*i+j] <= fm[ps][c][3*(p / PASS_TX[ps]) + i][3*(p % PASS_TX[ps]) + j];
        img_wr_en <= 1; img_wr_addr <= IAW'(p * nc + c);
        if (busy) n_overlap_wr++;
        @(posedge clk);
      end
    img_wr_en <= 0;
  endtask

  int start_cycle [NPASS];
  int chk_pass = 0, chk_pos = 0, last_out_cycle = -1;
  bit all_done = 0;

  initial begin
    for (int ps = 0; ps < NPASS; ps++) make_data(ps);
    make_expected(0);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_pass(0);
    for (int ps = 0; ps < NPASS; ps++) begin
      while (busy) @(posedge clk);
      img_swap <= 1; ker_swap <= 1; n_swap++;
      @(posedge clk);
      img_swap <= 0; ker_swap <= 0;
      num_ch  <= (KAW+1)'(PASS_C[ps]);
      num_pos <= (IAW+1)'(PASS_TY[ps] * PASS_TX[ps]);
      start   <= 1;
      if (PASS_C[ps] == 1) n_single_ch++;
      @(posedge clk);
      start_cycle[ps] = cycle;   // the edge that sampled start
      start <= 0;
      @(posedge clk);
      if (ps + 1 < NPASS) load_pass(ps + 1);
    end
  end

  // results
  always @(posedge clk) begin
    if (rst_n && out_valid && !all_done) begin
      int np_, nc;
      np_ = PASS_TY[chk_pass] * PASS_TX[chk_pass];
      nc  = PASS_C[chk_pass];
      checks++;
      if (int'(out_pos) != chk_pos) begin failures++; $display("FAIL pass %0d: position %0d, expected %0d", chk_pass, out_pos, chk_pos); end
      if (chk_pos > 0) begin
        checks++;
        if (cycle - last_out_cycle != nc) begin
          failures++; $display("FAIL pass %0d: positions %0d clocks apart, expected C=%0d", chk_pass, cycle - last_out_cycle, nc);
        end else n_back_to_back++;
      end
      last_out_cycle = cycle;
      if (nc > 1) n_accum++;
      for (int k = 0; k < NP; k++)
        for (int i = 0; i < 9; i++) begin
          checks++;
          if (!close(out_tiles[k][i], exp_y[k][chk_pos][i], mag_y[k][chk_pos][i])) begin
            failures++;
            if (failures < 10) $display("FAIL pass %0d pos %0d kernel %0d Y%0d = %f expected %f", chk_pass, chk_pos, k, i,
                                        f32_to_real(out_tiles[k][i]), exp_y[k][chk_pos][i]);
          end
        end
      chk_pos++;
      if (chk_pos == np_) begin
        // sampled one edge after the result register: first read is one edge after start
        checks++;
        if (cycle - start_cycle[chk_pass] != np_ * nc + DP) begin
          failures++;
          $display("FAIL pass %0d: %0d clocks from start, expected N + D_p = %0d", chk_pass,
                   cycle - start_cycle[chk_pass], np_ * nc + DP);
        end
        $display("pass %0d: %0d positions x %0d channels x %0d kernels done, T_t = %0d clocks", chk_pass, np_, nc, NP,
                 cycle - start_cycle[chk_pass] - 1);
        chk_pos = 0;
        chk_pass++;
        if (chk_pass == NPASS) all_done = 1;
        else make_expected(chk_pass);
      end
    end
  end

  initial begin
    wait (all_done);
    repeat (3) @(posedge clk);
    if (COUNT_MECH) begin
      $display("mechanisms: overlapped buffer writes %0d, bank swaps %0d, accumulated positions %0d, single-channel passes %0d, back-to-back positions %0d",
               n_overlap_wr, n_swap, n_accum, n_single_ch, n_back_to_back);
      checks += 5;
      if (n_overlap_wr == 0) begin failures++; $display("FAIL no buffer write overlapped a pass"); end
      if (n_swap == 0)       begin failures++; $display("FAIL no bank swap"); end
      if (n_accum == 0)      begin failures++; $display("FAIL no channel accumulation"); end
      if (n_single_ch == 0)  begin failures++; $display("FAIL no single-channel pass"); end
      if (n_back_to_back == 0) begin failures++; $display("FAIL no back-to-back positions"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: pass %0d position %0d", chk_pass, chk_pos);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
