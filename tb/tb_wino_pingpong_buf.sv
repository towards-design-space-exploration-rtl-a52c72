// tb_wino_pingpong_buf: checks the double-buffered memory.
// Fills bank 0 (the write side after reset), swaps, then reads it back while writing
// different data into the other bank, swaps again and reads that. Read data must
// appear one clock after rd_en, come only from the read bank, and writes to the
// fill bank must never disturb what is being read.
module tb_wino_pingpong_buf;
  localparam int W = 40, D = 32;
  logic clk = 0, rst_n = 0, swap = 0, wr_en = 0, rd_en = 0, rd_bank;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] ref_mem [2][D];
  int checks = 0, failures = 0;

  wino_pingpong_buf #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .swap, .wr_en, .wr_addr, .wr_data,
                                                  .rd_en, .rd_addr, .rd_data, .rd_bank);
  always #5 clk = ~clk;

  task automatic read_check(int a, int bank);
    rd_en <= 1; rd_addr <= a[$clog2(D)-1:0];
    @(posedge clk);
    rd_en <= 0;
    #1;
    checks++;
    if (rd_data !== ref_mem[bank][a]) begin
      failures++;
      if (failures < 10) $display("FAIL bank %0d addr %0d = %h expected %h", bank, a, rd_data, ref_mem[bank][a]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    checks++; if (rd_bank !== 1'b0) failures++;
    // fill the write bank (bank 1 while bank 0 is read)
    for (int a = 0; a < D; a++) begin
      ref_mem[1][a] = {$urandom, 8'($urandom)};
      wr_en <= 1; wr_addr <= a[$clog2(D)-1:0]; wr_data <= ref_mem[1][a];
      @(posedge clk);
    end
    wr_en <= 0;
    swap <= 1; @(posedge clk); swap <= 0; @(posedge clk);
    checks++; if (rd_bank !== 1'b1) begin failures++; $display("FAIL swap"); end
    // read bank 1 while filling bank 0 with other data at the same addresses
    for (int a = 0; a < D; a++) begin
      ref_mem[0][a] = {$urandom, 8'($urandom)};
      wr_en <= 1; wr_addr <= a[$clog2(D)-1:0]; wr_data <= ref_mem[0][a];
      read_check(a, 1);
    end
    wr_en <= 0;
    swap <= 1; @(posedge clk); swap <= 0; @(posedge clk);
    for (int a = D - 1; a >= 0; a--) read_check(a, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * D + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
