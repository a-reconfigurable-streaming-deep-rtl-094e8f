// tb_pe: checks the processing engine's data register (shift and hold)
// and its gated product against a direct model, over random stimulus.
`timescale 1ns/1ps
module tb_pe;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic shift = 0, en = 0;
  data_t din = '0, weight = '0, dout;
  logic signed [31:0] prod;
  int checks = 0, failures = 0;
  data_t held;

  pe dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    held = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      shift = $urandom_range(0, 1); en = $urandom_range(0, 3) != 0;
      din = data_t'($urandom); weight = data_t'($urandom);
      if (shift) held = din;
      @(posedge clk); #0.5;
      checks++;
      if (dout != held) begin failures++; $display("dout %0d exp %0d", dout, held); end
      checks++;
      if (prod != (en ? int'(held) * int'(weight) : 0)) begin
        failures++; $display("prod %0d exp %0d", prod, en ? int'(held) * int'(weight) : 0);
      end
    end
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
