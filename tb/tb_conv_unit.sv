// tb_conv_unit: streams random columns through one 3x3 CU and compares
// `psum` (3x3 mode) and `psum1x1` (1x1 mode) with the window inner
// product, rounded to Q8.8, computed from the stream history. It also
// checks the two-cycle latency and the EN_Ctrl gating.
`timescale 1ns/1ps
module tb_conv_unit;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic advance = 0, mode_1x1 = 0, en_in = 0;
  data_t data_in [3];
  data_t w [3][3];
  data_t psum;
  data_t psum1x1 [2];
  int checks = 0, failures = 0;
  int hist [$][3];
  bit enh [$];

  conv_unit dut (.*);

  // Column k is captured at the k-th rising edge with advance high. After
  // k columns have been captured, psum holds the window of columns k-4..k-2
  // (3x3) and psum1x1 the products of column k-2 (1x1).
  task automatic run(input bit m1);
    mode_1x1 = m1;
    hist.delete(); enh.delete();
    foreach (w[r, c]) w[r][c] = data_t'($urandom_range(0, 511) - 256);
    for (int t = 0; t < 80; t++) begin
      @(negedge clk);
      begin
        int k;
        k = hist.size();
        if (k >= 4) begin
          longint s;
          if (!m1) begin
            s = 0;
            for (int r = 0; r < 3; r++)
              for (int c = 0; c < 3; c++) s += longint'(w[r][c]) * hist[k - 4 + c][r];
            checks++;
            if (int'(psum) != (enh[k-2] ? rnd(s) : 0)) begin
              failures++; $display("3x3 col %0d psum %0d exp %0d", k - 4, psum, rnd(s));
            end
          end else begin
            checks += 2;
            if (int'(psum1x1[0]) != (enh[k-2] ? rnd(longint'(w[1][0]) * hist[k-2][2]) : 0)) failures++;
            if (int'(psum1x1[1]) != (enh[k-2] ? rnd(longint'(w[2][0]) * hist[k-2][2]) : 0)) failures++;
          end
        end
      end
      advance = 1;
      en_in = $urandom_range(0, 3) != 0;
      foreach (data_in[r]) data_in[r] = data_t'($urandom_range(0, 2047) - 1024);
      hist.push_back('{int'(data_in[0]), int'(data_in[1]), int'(data_in[2])});
      enh.push_back(en_in);
    end
    @(negedge clk); advance = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    foreach (data_in[r]) data_in[r] = '0;
    foreach (w[r, c]) w[r][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0);
    run(1);
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
