// tb_buffer_bank: host writes and reads of all four banks, 256-bit fetch
// reads of the input set while busy, readout writes into the output set,
// and a check that host writes are ignored while busy. Compared against a
// simple array model.
`timescale 1ns/1ps
module tb_buffer_bank;
  import cnn_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  localparam int D = 64;
  logic busy = 0, in_set = 0, fetch_en = 0, wr_en = 0, wr_bank = 0;
  logic [5:0] fetch_addr = '0, wr_addr = '0, host_addr = '0;
  data_t fetch_rdata [NSETS][LANES];
  data_t wr_data [LANES];
  logic host_en = 0, host_we = 0, host_set = 0, host_bank = 0;
  data_t host_wdata [LANES];
  data_t host_rdata [LANES];
  int checks = 0, failures = 0;
  int model [2][2][D][LANES];

  buffer_bank #(.DEPTH(D)) dut (.*);

  task automatic hwrite(bit s, bit b, int a);
    @(negedge clk);
    host_en = 1; host_we = 1; host_set = s; host_bank = b; host_addr = 6'(a);
    foreach (host_wdata[i]) begin
      host_wdata[i] = data_t'($urandom);
      if (!busy) model[s][b][a][i] = int'(host_wdata[i]);
    end
    @(negedge clk); host_en = 0; host_we = 0;
  endtask

  task automatic hcheck(bit s, bit b, int a);
    @(negedge clk);
    host_en = 1; host_we = 0; host_set = s; host_bank = b; host_addr = 6'(a);
    @(negedge clk); host_en = 0;
    foreach (host_rdata[i]) begin
      checks++;
      if (int'(host_rdata[i]) != model[s][b][a][i]) begin
        failures++; $display("host read s%0d b%0d a%0d lane%0d", s, b, a, i);
      end
    end
  endtask

  initial begin
    foreach (host_wdata[i]) host_wdata[i] = '0;
    foreach (wr_data[i]) wr_data[i] = '0;
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < 2; b++)
        for (int a = 0; a < D; a++) hwrite(1'(s), 1'(b), a);
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < 2; b++)
        for (int a = 0; a < D; a += 5) hcheck(1'(s), 1'(b), a);
    // busy: fetch from set 1, readout writes to set 0
    @(negedge clk); busy = 1; in_set = 1;
    for (int a = 0; a < D; a += 3) begin
      @(negedge clk);
      fetch_en = 1; fetch_addr = 6'(a);
      wr_en = 1; wr_bank = a[0]; wr_addr = 6'(a);
      foreach (wr_data[i]) begin
        wr_data[i] = data_t'($urandom);
        model[0][a[0]][a][i] = int'(wr_data[i]);
      end
      @(negedge clk); fetch_en = 0; wr_en = 0;
      for (int b = 0; b < 2; b++)
        foreach (fetch_rdata[b][i]) begin
          checks++;
          if (int'(fetch_rdata[b][i]) != model[1][b][a][i]) begin
            failures++; $display("fetch b%0d a%0d lane%0d", b, a, i);
          end
        end
    end
    hwrite(1, 1, 9);   // ignored while busy
    @(negedge clk); busy = 0;
    hcheck(1, 1, 9);
    for (int a = 0; a < D; a += 3) hcheck(0, a[0], a);
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
