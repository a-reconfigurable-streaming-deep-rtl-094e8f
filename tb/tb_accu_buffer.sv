// tb_accu_buffer: runs the ACCU buffer as the sequencer would. It
// accumulates a feature over two passes, swaps, and accumulates the next
// feature while the previous one is max-pooled and read out through ReLU.
// Then it does a 1x1 feature pair (A and B halves). The buffer-bank writes
// are captured in a model and compared with features computed directly
// (sums, bias, pooling, ReLU).
`timescale 1ns/1ps
module tb_accu_buffer;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  tag_t tag = '0;
  data_t in_a [LANES];
  data_t in_b [LANES];
  logic k1x1 = 0, first = 0, swap = 0;
  logic [1:0] stride = 0;
  crd_t sr = '0, sc = '0;
  dim_t out_h = '0, out_w = '0, job_h = '0, job_w = '0;
  data_t bias [2];
  logic job_two = 0, job_pool = 0, job_pool3 = 0, job_relu = 0, job_bank_a = 0, job_bank_b = 0;
  logic [BANK_AW-1:0] job_base_a = '0, job_base_b = '0;
  logic post_busy, sel, bk_wr_en, bk_wr_bank;
  logic [BANK_AW-1:0] bk_wr_addr;
  data_t bk_wr_data [LANES];
  int checks = 0, failures = 0;
  int bankm [2][256][LANES];
  int feat [4][16][16];
  int overlap = 0;

  accu_buffer dut (.*);

  always @(posedge clk) if (bk_wr_en)
    for (int i = 0; i < LANES; i++) bankm[bk_wr_bank][bk_wr_addr][i] = int'(bk_wr_data[i]);

  // post job running while partial sums arrive: the ping-pong overlap
  always @(posedge clk) if (post_busy && tag.valid) overlap++;

  // Stream one pass of a feature (3x3: pad-1 geometry; 1x1: plain) and
  // update the reference.
  task automatic pass(bit m1, int oh, int ow, bit fst, int fa, int fb);
    k1x1 = m1; stride = 0; sr = m1 ? 14'sd0 : 14'sd1; sc = sr;
    out_h = dim_t'(oh); out_w = dim_t'(ow); first = fst;
    for (int g = 0; g <= (oh - 1 + (m1 ? 0 : 1)) / 8; g++)
      for (int q = -int'(sc); q <= ow - 1 - int'(sc); q++) begin
        @(negedge clk);
        tag.valid = 1; tag.g = crd_t'(g); tag.q = crd_t'(q);
        for (int k = 0; k < LANES; k++) begin
          int x;
          in_a[k] = data_t'($urandom_range(0, 1023) - 512);
          in_b[k] = data_t'($urandom_range(0, 1023) - 512);
          x = 8 * g + k - (m1 ? 0 : 2) + int'(sr);
          if (x >= 0 && x < oh) begin
            feat[fa][x][q + int'(sc)] = fst ? sat(longint'(bias[0]) + in_a[k])
                                            : sat(longint'(feat[fa][x][q + int'(sc)]) + in_a[k]);
            if (m1)
              feat[fb][x][q + int'(sc)] = fst ? sat(longint'(bias[1]) + in_b[k])
                                              : sat(longint'(feat[fb][x][q + int'(sc)]) + in_b[k]);
          end
        end
      end
    @(negedge clk); tag = '0;
    repeat (4) @(negedge clk);
  endtask

  task automatic do_swap(bit two, bit pool, bit relu, int fa, int fb, int h, int w);
    while (post_busy) @(negedge clk);
    swap = 1; job_two = two; job_pool = pool; job_pool3 = 0; job_relu = relu;
    job_h = dim_t'(h); job_w = dim_t'(w);
    job_bank_a = 1'(fa); job_base_a = BANK_AW'((fa / 2) * 64);
    job_bank_b = 1'(fb); job_base_b = BANK_AW'((fb / 2) * 64);
    @(negedge clk); swap = 0;
  endtask

  task automatic check_feature(int f, int h, int w, bit pool, bit relu);
    int fh, fw, v;
    fh = pool ? h / 2 : h; fw = pool ? w / 2 : w;
    for (int x = 0; x < fh; x++)
      for (int y = 0; y < fw; y++) begin
        if (pool) begin
          v = feat[f][2*x][2*y];
          if (feat[f][2*x+1][2*y] > v) v = feat[f][2*x+1][2*y];
          if (feat[f][2*x][2*y+1] > v) v = feat[f][2*x][2*y+1];
          if (feat[f][2*x+1][2*y+1] > v) v = feat[f][2*x+1][2*y+1];
        end else v = feat[f][x][y];
        if (relu && v < 0) v = 0;
        checks++;
        if (bankm[f % 2][(f / 2) * 64 + (x / 8) * fw + y][x % 8] != v) begin
          failures++;
          if (failures < 8) $display("feature %0d (%0d,%0d): %0d exp %0d", f, x, y,
                                     bankm[f % 2][(f / 2) * 64 + (x / 8) * fw + y][x % 8], v);
        end
      end
  endtask

  initial begin
    foreach (in_a[k]) begin in_a[k] = '0; in_b[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // feature 0: two passes, then pooled + ReLU while feature 1 accumulates
    bias[0] = 16'sd100; bias[1] = 16'sd0;
    pass(0, 12, 12, 1, 0, 0);
    pass(0, 12, 12, 0, 0, 0);
    do_swap(0, 1, 1, 0, 0, 12, 12);
    bias[0] = -16'sd50;
    pass(0, 12, 12, 1, 1, 1);
    pass(0, 12, 12, 0, 1, 1);
    do_swap(0, 0, 0, 1, 1, 12, 12);
    // 1x1 pair: features 2 and 3
    bias[0] = 16'sd7; bias[1] = -16'sd9;
    pass(1, 16, 16, 1, 2, 3);
    pass(1, 16, 16, 0, 2, 3);
    do_swap(1, 0, 1, 2, 3, 16, 16);
    @(negedge clk);
    while (post_busy) @(negedge clk);
    check_feature(0, 12, 12, 1, 1);
    check_feature(1, 12, 12, 0, 0);
    check_feature(2, 16, 16, 0, 1);
    check_feature(3, 16, 16, 0, 1);
    checks++;
    if (overlap == 0) begin failures++; $display("post job never overlapped accumulation"); end
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
