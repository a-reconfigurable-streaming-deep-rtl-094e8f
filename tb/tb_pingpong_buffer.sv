// tb_pingpong_buffer: writes different data through the accumulator port
// and the post port at the same time. It then flips `sel` and checks that
// each port now reaches the sub-buffer the other port wrote, and that the
// two sub-buffers never mix.
`timescale 1ns/1ps
module tb_pingpong_buffer;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, sel = 0;
  always #1 clk = ~clk;
  logic a_rd_en [SP_MEMS], a_wr_en [SP_MEMS], p_rd_en [SP_MEMS], p_wr_en [SP_MEMS];
  logic [7:0] a_rd_addr [SP_MEMS], a_wr_addr [SP_MEMS], p_rd_addr [SP_MEMS], p_wr_addr [SP_MEMS];
  data_t a_rd_data [SP_MEMS], a_wr_data [SP_MEMS], p_rd_data [SP_MEMS], p_wr_data [SP_MEMS];
  int checks = 0, failures = 0;
  int model [2][SP_MEMS][256];

  pingpong_buffer dut (.*);

  task automatic idle();
    for (int j = 0; j < SP_MEMS; j++) begin
      a_rd_en[j] = 0; a_wr_en[j] = 0; p_rd_en[j] = 0; p_wr_en[j] = 0;
      a_rd_addr[j] = 0; a_wr_addr[j] = 0; p_rd_addr[j] = 0; p_wr_addr[j] = 0;
      a_wr_data[j] = 0; p_wr_data[j] = 0;
    end
  endtask

  task automatic fill();
    for (int a = 0; a < 256; a += 7) begin
      @(negedge clk);
      for (int j = 0; j < SP_MEMS; j++) begin
        a_wr_en[j] = 1; a_wr_addr[j] = 8'(a); a_wr_data[j] = data_t'($urandom);
        p_wr_en[j] = 1; p_wr_addr[j] = 8'(a); p_wr_data[j] = data_t'($urandom);
        model[sel][j][a] = int'(a_wr_data[j]);
        model[!sel][j][a] = int'(p_wr_data[j]);
      end
    end
    @(negedge clk); idle();
  endtask

  task automatic readback();
    for (int a = 0; a < 256; a += 7) begin
      @(negedge clk);
      for (int j = 0; j < SP_MEMS; j++) begin
        a_rd_en[j] = 1; a_rd_addr[j] = 8'(a);
        p_rd_en[j] = 1; p_rd_addr[j] = 8'(a);
      end
      @(negedge clk); idle();
      for (int j = 0; j < SP_MEMS; j++) begin
        checks += 2;
        if (int'(a_rd_data[j]) != model[sel][j][a]) begin failures++; $display("acc side a%0d m%0d", a, j); end
        if (int'(p_rd_data[j]) != model[!sel][j][a]) begin failures++; $display("post side a%0d m%0d", a, j); end
      end
    end
  endtask

  initial begin
    idle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    fill();
    readback();
    @(negedge clk); sel = 1;
    readback();
    fill();
    @(negedge clk); sel = 0;
    readback();
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
