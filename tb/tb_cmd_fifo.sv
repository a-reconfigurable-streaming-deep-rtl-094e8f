// tb_cmd_fifo: fills the 128-deep FIFO to full (checking that `in_ready`
// drops at exactly 128 words), drains it, then runs random simultaneous
// pushes and pops against a queue model.
`timescale 1ns/1ps
module tb_cmd_fifo;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  logic [15:0] model [$];

  cmd_fifo dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_data != model[0]) begin
        failures++; $display("pop %h expected %h", out_data, model.size() ? model[0] : 16'hx);
      end
      if (model.size()) void'(model.pop_front());
    end
    if (in_valid && in_ready) model.push_back(in_data);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 130; i++) begin
      @(negedge clk);
      checks++;
      if (in_ready != (i < 128)) begin failures++; $display("in_ready wrong at %0d", i); end
      in_valid = 1; in_data = 16'($urandom);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (130) @(negedge clk);
    checks++;
    if (out_valid) failures++;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 1); in_data = 16'($urandom);
      out_ready = $urandom_range(0, 2) != 0;
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (140) @(negedge clk);
    checks++;
    if (model.size() != 0) failures++;
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
