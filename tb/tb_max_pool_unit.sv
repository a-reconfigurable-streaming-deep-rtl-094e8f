// tb_max_pool_unit: feeds random 2x2 and 3x3 windows column by column and
// checks the unit's output against the window maximum, and that `out_en`
// pulses once per window.
`timescale 1ns/1ps
module tb_max_pool_unit;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic valid = 0, first = 0, last = 0, use_i2 = 0, out_en;
  data_t i0 = '0, i1 = '0, i2 = '0, out;
  int checks = 0, failures = 0;

  max_pool_unit dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int win = 0; win < 300; win++) begin
      int k, m;
      k = (win % 2) ? 3 : 2;
      m = -40000;
      for (int c = 0; c < k; c++) begin
        @(negedge clk);
        valid = 1; first = (c == 0); last = (c == k - 1); use_i2 = (k == 3);
        i0 = data_t'($urandom); i1 = data_t'($urandom); i2 = data_t'($urandom);
        if (int'(i0) > m) m = int'(i0);
        if (int'(i1) > m) m = int'(i1);
        if (k == 3 && int'(i2) > m) m = int'(i2);
        if (c < k - 1) begin
          @(posedge clk); #0.1;
          checks++;
          if (out_en) begin failures++; $display("early out_en"); end
        end
      end
      @(posedge clk); #0.1;
      valid = 0;
      checks += 2;
      if (!out_en) begin failures++; $display("no out_en"); end
      if (int'(out) != m) begin failures++; $display("win %0d out %0d exp %0d", win, out, m); end
      if ($urandom_range(0, 1)) begin @(negedge clk); valid = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
