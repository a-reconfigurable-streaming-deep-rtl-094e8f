// tb_col_buffer: streams several row groups of random data through the
// COL buffer and checks that CU k of each set receives rows 8g+k-2,
// 8g+k-1 and 8g+k. The first two rows come from the previous group's
// rows 6 and 7 of the same column, or are zero in the first group.
`timescale 1ns/1ps
module tb_col_buffer;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  localparam int DEPTH = 16;
  logic restart = 0, valid = 0, first_grp = 0;
  logic [$clog2(DEPTH+1)-1:0] len = '0;
  data_t bank_rows [NSETS][LANES];
  data_t cu_data [NSETS][LANES][3];
  int checks = 0, failures = 0;
  int img [NSETS][40][DEPTH];   // rows x columns of the streamed image

  col_buffer #(.DEPTH(DEPTH)) dut (.*);

  function automatic int rowval(int s, int r, int x);
    return (r < 0) ? 0 : img[s][r][x];
  endfunction

  task automatic run_pass(input int ncol, input int ngrp);
    foreach (img[s, r, x]) img[s][r][x] = $urandom_range(0, 65535) - 32768;
    @(negedge clk); restart = 1; len = ($bits(len))'(ncol);
    @(negedge clk); restart = 0;
    for (int g = 0; g < ngrp; g++)
      for (int x = 0; x < ncol; x++) begin
        valid = 1; first_grp = (g == 0);
        for (int s = 0; s < NSETS; s++)
          for (int i = 0; i < LANES; i++) bank_rows[s][i] = data_t'(img[s][8 * g + i][x]);
        #0.5;
        for (int s = 0; s < NSETS; s++)
          for (int k = 0; k < LANES; k++)
            for (int r = 0; r < 3; r++) begin
              checks++;
              if (int'(cu_data[s][k][r]) != rowval(s, 8 * g + k - 2 + r, x)) begin
                failures++;
                if (failures < 5) $display("g%0d x%0d s%0d k%0d r%0d: %0d exp %0d", g, x, s, k, r,
                                           cu_data[s][k][r], rowval(s, 8 * g + k - 2 + r, x));
              end
            end
        @(negedge clk);
      end
    valid = 0;
  endtask

  initial begin
    foreach (bank_rows[s, i]) bank_rows[s][i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_pass(7, 4);
    run_pass(16, 3);
    run_pass(3, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
