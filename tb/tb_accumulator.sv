// tb_accumulator: drives the accumulator with back-to-back partial sums
// for several passes (first pass with bias, then accumulation) in 3x3 and
// 1x1 mode, with strides and shift offsets. The scratchpad is a behavioural
// array here. At the end every output position in the scratchpad must
// equal a reference built from the position formula
// X = (8g + k - 2 + sr) / s, Y = (q + sc) / s and the documented layout.
`timescale 1ns/1ps
module tb_accumulator;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  tag_t tag = '0;
  data_t in_a [LANES];
  data_t in_b [LANES];
  logic k1x1 = 0, first = 0;
  logic [1:0] stride = 0;
  crd_t sr = '0, sc = '0;
  dim_t out_h = '0, out_w = '0;
  data_t bias [2];
  logic rd_en [SP_MEMS], wr_en [SP_MEMS];
  logic [7:0] rd_addr [SP_MEMS], wr_addr [SP_MEMS];
  data_t rd_data [SP_MEMS], wr_data [SP_MEMS];
  int checks = 0, failures = 0;
  data_t mem [SP_MEMS][256];
  int refo [2][32][32];
  bit wrote [2][32][32];

  accumulator dut (.*);

  always @(posedge clk)
    for (int j = 0; j < SP_MEMS; j++) begin
      if (rd_en[j]) rd_data[j] <= mem[j][rd_addr[j]];
      if (wr_en[j]) mem[j][wr_addr[j]] <= wr_data[j];
    end

  task automatic scenario(bit m1, int st, int oh, int ow, int srv, int scv, int npass);
    int s, pmin, pmax, qmin, qmax, glo, ghi;
    s = 1 << st;
    k1x1 = m1; stride = 2'(st); sr = crd_t'(srv); sc = crd_t'(scv);
    out_h = dim_t'(oh); out_w = dim_t'(ow);
    bias[0] = data_t'($urandom_range(0, 511) - 256); bias[1] = data_t'($urandom_range(0, 511) - 256);
    pmin = -srv; pmax = s * (oh - 1) - srv; qmin = -scv; qmax = s * (ow - 1) - scv;
    glo = $floor(real'(pmin + (m1 ? 0 : 2)) / 8); ghi = $floor(real'(pmax + (m1 ? 0 : 2)) / 8);
    foreach (wrote[f, x, y]) wrote[f][x][y] = 0;
    for (int pass = 0; pass < npass; pass++) begin
      @(negedge clk);
      first = (pass == 0);
      for (int g = glo; g <= ghi; g++)
        for (int q = qmin - 1; q <= qmax; q++) begin
          tag.valid = (q >= qmin) && ((q + scv) % s == 0);
          tag.g = crd_t'(g); tag.q = crd_t'(q);
          for (int k = 0; k < LANES; k++) begin
            in_a[k] = data_t'($urandom_range(0, 4095) - 2048);
            in_b[k] = data_t'($urandom_range(0, 4095) - 2048);
          end
          if (tag.valid)
            for (int f = 0; f < (m1 ? 2 : 1); f++)
              for (int k = 0; k < LANES; k++) begin
                int p, xs, ys, v;
                p = 8 * g + k - (m1 ? 0 : 2);
                xs = p + srv; ys = q + scv;
                v = (f == 0) ? int'(in_a[k]) : int'(in_b[k]);
                if (xs >= 0 && ys >= 0 && xs % s == 0 && ys % s == 0 && xs / s < oh && ys / s < ow) begin
                  refo[f][xs / s][ys / s] = (pass == 0) ? sat(longint'(bias[f]) + v)
                                                        : sat(longint'(refo[f][xs / s][ys / s]) + v);
                  wrote[f][xs / s][ys / s] = 1;
                end
              end
          @(negedge clk);
        end
      tag = '0;
      repeat (3) @(negedge clk);
    end
    for (int f = 0; f < (m1 ? 2 : 1); f++)
      for (int x = 0; x < oh; x++)
        for (int y = 0; y < ow; y++) begin
          int la, j;
          la = (x / 8) * ow + y + 256 * f;
          j = (x % 8) + 8 * (la / 256);
          checks++;
          if (!wrote[f][x][y] || int'(mem[j][la % 256]) != refo[f][x][y]) begin
            failures++;
            if (failures < 8) $display("f%0d (%0d,%0d): mem %0d ref %0d wrote %0d", f, x, y,
                                       mem[j][la % 256], refo[f][x][y], wrote[f][x][y]);
          end
        end
  endtask

  initial begin
    foreach (in_a[k]) begin in_a[k] = '0; in_b[k] = '0; end
    bias[0] = '0; bias[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    scenario(0, 0, 12, 12, 2, 2, 3);     // 3x3, pad 2 shift 0
    scenario(0, 0, 12, 12, -1, -1, 2);   // 3x3, shifted sub-filter (pad 2, shift 3)
    scenario(0, 1, 6, 6, 0, 0, 2);       // stride 2
    scenario(0, 2, 3, 3, -6, -3, 2);     // stride 4 with shift
    scenario(1, 0, 16, 16, 0, 0, 3);     // 1x1 two features
    scenario(0, 0, 30, 30, 1, 1, 2);     // large feature: addresses above 255
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
