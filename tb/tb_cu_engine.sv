// tb_cu_engine: drives the 16-CU engine with random row data held for
// several columns, so every PE of a CU holds the same column. It checks
// out_a/out_b against the merged inner products of the even and odd sets
// in 3x3 and 1x1 mode, and that the tag comes out three clocks after its
// column.
`timescale 1ns/1ps
module tb_cu_engine;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic advance = 0, mode_1x1 = 0, en_in = 0;
  tag_t tag_in = '0, tag_out;
  data_t cu_data [NSETS][LANES][3];
  data_t w [NSETS][3][3];
  data_t out_a [LANES];
  data_t out_b [LANES];
  int checks = 0, failures = 0;

  cu_engine dut (.*);

  initial begin
    foreach (cu_data[s, k, r]) cu_data[s][k][r] = '0;
    foreach (w[s, r, c]) w[s][r][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      bit m1;
      m1 = it[0];
      @(negedge clk);
      mode_1x1 = m1; advance = 1; en_in = 1;
      foreach (cu_data[s, k, r]) cu_data[s][k][r] = data_t'($urandom_range(0, 2047) - 1024);
      foreach (w[s, r, c]) w[s][r][c] = data_t'($urandom_range(0, 511) - 256);
      tag_in = '{valid: 1'b1, g: crd_t'(it), q: crd_t'(3 * it)};
      @(negedge clk);
      tag_in = '0;
      repeat (4) @(negedge clk);   // the same column has filled the CU, result settled
      for (int k = 0; k < LANES; k++) begin
        int ea, eb;
        if (!m1) begin
          int p [2];
          for (int s = 0; s < 2; s++) begin
            longint sum; sum = 0;
            for (int r = 0; r < 3; r++)
              for (int c = 0; c < 3; c++) sum += longint'(w[s][r][c]) * cu_data[s][k][r];
            p[s] = rnd(sum);
          end
          ea = sat(longint'(p[0]) + p[1]); eb = 0;
        end else begin
          ea = sat(longint'(rnd(longint'(w[0][1][0]) * cu_data[0][k][2]))
                   + rnd(longint'(w[1][1][0]) * cu_data[1][k][2]));
          eb = sat(longint'(rnd(longint'(w[0][2][0]) * cu_data[0][k][2]))
                   + rnd(longint'(w[1][2][0]) * cu_data[1][k][2]));
        end
        checks += 2;
        if (int'(out_a[k]) != ea) begin failures++; $display("it%0d k%0d a %0d exp %0d", it, k, out_a[k], ea); end
        if (int'(out_b[k]) != eb) begin failures++; $display("it%0d k%0d b %0d exp %0d", it, k, out_b[k], eb); end
      end
      advance = 0;
    end
    // tag latency: a tag presented at one edge appears three edges later
    @(negedge clk);
    advance = 1; tag_in = '{valid: 1'b1, g: 14'sd5, q: 14'sd7};
    @(negedge clk); tag_in = '0; advance = 0;
    for (int d = 1; d <= 4; d++) begin
      checks++;
      if ((d == 3) != (tag_out.valid && tag_out.g == 5 && tag_out.q == 7)) begin
        failures++; $display("tag at +%0d wrong", d);
      end
      @(negedge clk);
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
