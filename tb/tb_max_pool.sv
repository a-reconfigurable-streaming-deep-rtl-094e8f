// tb_max_pool: preloads a random feature into a behavioural scratchpad in
// the documented layout, runs the max pool block for 2x2 and 3x3 windows,
// in both halves and across the 256-word boundary, and compares the pooled
// layout written back in place with window maxima computed directly. It
// also checks the run length.
`timescale 1ns/1ps
module tb_max_pool;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, pool3 = 0, region_b = 0, busy, done;
  dim_t out_h = '0, out_w = '0;
  logic rd_en [SP_MEMS], wr_en [SP_MEMS];
  logic [7:0] rd_addr [SP_MEMS], wr_addr [SP_MEMS];
  data_t rd_data [SP_MEMS], wr_data [SP_MEMS];
  int checks = 0, failures = 0;
  data_t mem [SP_MEMS][256];
  int feat [64][64];

  max_pool dut (.*);

  always @(posedge clk)
    for (int j = 0; j < SP_MEMS; j++) begin
      if (rd_en[j]) rd_data[j] <= mem[j][rd_addr[j]];
      if (wr_en[j]) mem[j][wr_addr[j]] <= wr_data[j];
    end

  function automatic int loc(int x, int y, int w, bit b, output int j);
    int la;
    la = (x / 8) * w + y + (b ? 256 : 0);
    j = (x % 8) + 8 * (la / 256);
    return la % 256;
  endfunction

  task automatic run(bit k3, int h, int w, bit b);
    int k, ph, pw, a, j, t0, cyc, u;
    k = k3 ? 3 : 2; ph = h / k; pw = w / k; u = k3 ? 2 : 4;
    for (int x = 0; x < h; x++)
      for (int y = 0; y < w; y++) begin
        feat[x][y] = $urandom_range(0, 65535) - 32768;
        a = loc(x, y, w, b, j);
        mem[j][a] = data_t'(feat[x][y]);
      end
    @(negedge clk);
    pool3 = k3; out_h = dim_t'(h); out_w = dim_t'(w); region_b = b; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != ((ph + u - 1) / u) * pw * k + 4) begin
      failures++; $display("run length %0d expected %0d", cyc, ((ph + u - 1) / u) * pw * k + 4);
    end
    for (int x = 0; x < ph; x++)
      for (int y = 0; y < pw; y++) begin
        int m;
        m = -40000;
        for (int i = 0; i < k; i++)
          for (int jj = 0; jj < k; jj++)
            if (feat[k * x + i][k * y + jj] > m) m = feat[k * x + i][k * y + jj];
        a = loc(x, y, pw, b, j);
        checks++;
        if (int'(mem[j][a]) != m) begin
          failures++;
          if (failures < 8) $display("K%0d %0dx%0d (%0d,%0d): %0d exp %0d", k, h, w, x, y, mem[j][a], m);
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 12, 12, 0);
    run(1, 10, 10, 1);
    run(0, 13, 9, 1);
    run(1, 50, 40, 0);
    run(0, 64, 32, 0);
    run(1, 9, 27, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
