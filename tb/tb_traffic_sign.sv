// tb_traffic_sign: runs the convolution layers of a small traffic-sign
// classifier (a modified LeNet-5) on the accelerator at its default size,
// one layer after another, each layer reading the previous one's output
// where it was left in the buffer bank:
//   conv 5x5, 3 -> 64 features on 32x32 (pad 2), fused 2x2 max pool, ReLU
//   conv 5x5, 64 -> 16 features on 16x16 (pad 2), fused 2x2 max pool, ReLU
//   conv 5x5, 16 -> 16 features on 8x8 (pad 2), ReLU
// The layer shapes are those of the classifier's published table; the
// padding, the ReLUs and the last layer's feature count (taken from the
// 8x8x16 input of the fully-connected layer that follows) are assumed.
// The fully-connected layer itself is not run. Inputs, weights and biases
// are random. Every output pixel is compared with a direct model of the
// layer with the design's rounding, and every pass must stream one column
// per clock. The cycle count of each layer is printed.
`timescale 1ns/1ps
module tb_traffic_sign;
  import cnn_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic               cmd_valid = 0, cmd_ready;
  logic [15:0]        cmd_data = '0;
  logic               wt_valid = 0, wt_ready;
  logic [63:0]        wt_data = '0;
  logic               host_en = 0, host_we = 0, host_set = 0, host_bank = 0;
  logic [BANK_AW-1:0] host_addr = '0;
  data_t              host_wdata [LANES];
  data_t              host_rdata [LANES];
  logic               busy, halted;
  logic [31:0]        stat_wstall, stat_pstall, stat_passes;

  cnn_accel_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- layer description and reference model ----------------
  localparam int MC = 64, MS = 32, MK = 5, MF = 64;
  int img  [MC][MS][MS];
  int wk   [MF][MC][MK][MK];
  int bias [MF];
  int refo [MF][MS][MS];
  int L_h, L_w, L_nch, L_nf, L_k, L_stride, L_pad, L_oh, L_ow;
  bit L_1x1, L_relu, L_pool, L_pool3, L_in_set;

  function automatic int px(int c, int r, int x);
    if (r < 0 || x < 0 || r >= L_h || x >= L_w || c >= L_nch) return 0;
    return img[c][r][x];
  endfunction

  // Reference of one layer, with the per-CU rounding the format implies:
  // each 3x3 sub-window sum of one channel is rounded, the even and odd
  // channel of a pair are added, then accumulated with saturation.
  task automatic reference();
    int ke, acc, tot, s, ps, fh, fw, m;
    ke = ((L_k + 2) / 3) * 3;
    for (int f = 0; f < L_nf; f++)
      for (int X = 0; X < L_oh; X++)
        for (int Y = 0; Y < L_ow; Y++) begin
          acc = 0;
          if (L_1x1) begin
            for (int cp = 0; cp < (L_nch + 1) / 2; cp++) begin
              tot = 0;
              for (int e = 0; e < 2; e++) begin
                int ch; ch = 2 * cp + e;
                ps = (ch < L_nch) ? rnd(longint'(wk[f][ch][0][0]) * px(ch, L_stride * X, L_stride * Y)) : 0;
                tot = sat(longint'(tot) + ps);
              end
              acc = (cp == 0) ? sat(longint'(bias[f]) + tot) : sat(longint'(acc) + tot);
            end
          end else begin
            bit first; first = 1;
            for (int a = 0; a < ke; a += 3)
              for (int b = 0; b < ke; b += 3)
                for (int cp = 0; cp < (L_nch + 1) / 2; cp++) begin
                  tot = 0;
                  for (int e = 0; e < 2; e++) begin
                    int ch; longint sum; ch = 2 * cp + e; sum = 0;
                    if (ch < L_nch)
                      for (int l = 0; l < 3; l++)
                        for (int mm = 0; mm < 3; mm++)
                          if (a + l < L_k && b + mm < L_k)
                            sum += longint'(wk[f][ch][a + l][b + mm])
                                 * px(ch, L_stride * X - L_pad + a + l, L_stride * Y - L_pad + b + mm);
                    tot = sat(longint'(tot) + rnd(sum));
                  end
                  acc = first ? sat(longint'(bias[f]) + tot) : sat(longint'(acc) + tot);
                  first = 0;
                end
          end
          refo[f][X][Y] = acc;
        end
    if (L_pool) begin
      s = L_pool3 ? 3 : 2;
      fh = L_oh / s; fw = L_ow / s;
      for (int f = 0; f < L_nf; f++)
        for (int X = 0; X < fh; X++)
          for (int Y = 0; Y < fw; Y++) begin
            m = -32768;
            for (int i = 0; i < s; i++)
              for (int j = 0; j < s; j++)
                if (refo[f][s * X + i][s * Y + j] > m) m = refo[f][s * X + i][s * Y + j];
            refo[f][X][Y] = m;
          end
    end
    if (L_relu)
      for (int f = 0; f < L_nf; f++)
        for (int X = 0; X < MS; X++)
          for (int Y = 0; Y < MS; Y++)
            if (refo[f][X][Y] < 0) refo[f][X][Y] = 0;
  endtask

  // ---------------- host access to the buffer bank ----------------
  task automatic host_write_layer(input bit set);
    int ng; ng = (L_h + 7) / 8;
    for (int c = 0; c < L_nch; c++)
      for (int g = 0; g < ng; g++)
        for (int x = 0; x < L_w; x++) begin
          @(negedge clk);
          host_en = 1; host_we = 1; host_set = set; host_bank = 1'(c);
          host_addr = BANK_AW'((c / 2) * ng * L_w + g * L_w + x);
          for (int i = 0; i < LANES; i++)
            host_wdata[i] = (8 * g + i < L_h) ? 16'(img[c][8 * g + i][x]) : 16'h5a5a;
        end
    @(negedge clk); host_en = 0; host_we = 0;
  endtask

  // Read the layer output back into img (it becomes the next layer's input).
  int oh_st, ow_st;
  task automatic host_check_output(input bit set, input string name);
    int ng, bad;
    bad = 0;
    oh_st = L_pool ? L_oh / (L_pool3 ? 3 : 2) : L_oh;
    ow_st = L_pool ? L_ow / (L_pool3 ? 3 : 2) : L_ow;
    ng = (oh_st + 7) / 8;
    for (int f = 0; f < L_nf; f++)
      for (int g = 0; g < ng; g++)
        for (int x = 0; x < ow_st; x++) begin
          @(negedge clk);
          host_en = 1; host_we = 0; host_set = set; host_bank = 1'(f);
          host_addr = BANK_AW'((f / 2) * ng * ow_st + g * ow_st + x);
          @(negedge clk);
          host_en = 0;
          for (int i = 0; i < LANES; i++)
            if (8 * g + i < oh_st) begin
              checks++;
              if (int'(host_rdata[i]) != refo[f][8 * g + i][x]) begin
                failures++; bad++;
                if (bad < 6)
                  $display("%s: feature %0d (%0d,%0d) got %0d expected %0d", name, f,
                           8 * g + i, x, int'(host_rdata[i]), refo[f][8 * g + i][x]);
              end
            end
        end
    for (int f = 0; f < L_nf; f++)
      for (int X = 0; X < oh_st; X++)
        for (int Y = 0; Y < ow_st; Y++) img[f][X][Y] = refo[f][X][Y];
    $display("%s: %0d x %0d x %0d checked, %0d mismatches", name, L_nf, oh_st, ow_st, bad);
  endtask

  // ---------------- command and weight streams ----------------
  logic [15:0] cmdq [$];
  logic [63:0] wtq [$];

  task automatic build_layer();
    int ke, w16 [WPKT_WORDS];
    ke = ((L_k + 2) / 3) * 3;
    cmdq.push_back(cmd(OP_IN_H, L_h));   cmdq.push_back(cmd(OP_IN_W, L_w));
    cmdq.push_back(cmd(OP_OUT_H, L_oh)); cmdq.push_back(cmd(OP_OUT_W, L_ow));
    cmdq.push_back(cmd(OP_NCH, L_nch));  cmdq.push_back(cmd(OP_NFEAT, L_nf));
    cmdq.push_back(cmd(OP_MODE, mode_word(L_1x1, L_stride, L_relu, L_pool, L_pool3, L_in_set, L_pad)));
    cmdq.push_back(cmd(OP_CLR_SHIFT, 0));
    if (!L_1x1)
      for (int a = 0; a < ke; a += 3)
        for (int b = 0; b < ke; b += 3)
          cmdq.push_back(cmd(OP_SHIFT, a | (b << 5)));
    cmdq.push_back(cmd(OP_RUN, 0));
    // weight packets in the decoder's loop order
    for (int f = 0; f < L_nf; f += (L_1x1 ? 2 : 1))
      for (int a = 0; a < (L_1x1 ? 1 : ke); a += 3)
        for (int b = 0; b < (L_1x1 ? 1 : ke); b += 3)
          for (int cp = 0; cp < (L_nch + 1) / 2; cp++) begin
            foreach (w16[i]) w16[i] = 0;
            w16[0] = bias[f];
            if (L_1x1) begin
              w16[1] = (f + 1 < L_nf) ? bias[f + 1] : 0;
              for (int e = 0; e < 2; e++) begin
                int ch; ch = 2 * cp + e;
                if (ch < L_nch) begin
                  w16[2 + 9 * e + 3] = wk[f][ch][0][0];
                  w16[2 + 9 * e + 6] = (f + 1 < L_nf) ? wk[f + 1][ch][0][0] : 0;
                end
              end
            end else begin
              for (int e = 0; e < 2; e++) begin
                int ch; ch = 2 * cp + e;
                for (int r = 0; r < 3; r++)
                  for (int c = 0; c < 3; c++)
                    if (ch < L_nch && a + r < L_k && b + c < L_k)
                      w16[2 + 9 * e + 3 * r + c] = wk[f][ch][a + r][b + c];
              end
            end
            for (int bt = 0; bt < WPKT_BEATS; bt++)
              wtq.push_back({16'(w16[4*bt+3]), 16'(w16[4*bt+2]), 16'(w16[4*bt+1]), 16'(w16[4*bt])});
          end
  endtask

  // Command stream: free-running.
  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) void'(cmdq.pop_front());
  end
  always @(negedge clk) begin
    cmd_valid <= cmdq.size() > 0;
    cmd_data  <= (cmdq.size() > 0) ? cmdq[0] : '0;
  end
  // Weight stream: throttled at random, as a shared DMA would be.
  always @(posedge clk) begin
    if (wt_valid && wt_ready) void'(wtq.pop_front());
  end
  always @(negedge clk) begin
    wt_valid <= (wtq.size() > 0) && ($urandom_range(0, 99) < 60);
    wt_data  <= (wtq.size() > 0) ? wtq[0] : '0;
  end

  // ---------------- mechanism counters ----------------
  int n_pass3 = 0, n_pass1 = 0, n_swap = 0, n_pool2 = 0, n_pool3 = 0, n_relu0 = 0;
  int n_prime = 0, n_stride = 0, n_decomp = 0, n_pad = 0, n_oddch = 0, n_twofeat = 0, n_onefeat1x1 = 0;
  int pass_cycles = 0, pass_expect = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.pass_start) begin
      int s, pmin, pmax, qmin, qmax, glo, ghi;
      if (dut.pcfg.k1x1) n_pass1++; else n_pass3++;
      if (dut.pcfg.stride != 0) n_stride++;
      if (dut.u_dec.nsh_eff > 1) n_decomp++;
      if (dut.pcfg.sr > 0 || dut.pcfg.sc > 0) n_pad++;
      if (2 * int'(dut.pcfg.cpair) + 1 >= int'(dut.pcfg.nch)) n_oddch++;
      // expected streaming length of the pass, from the walk definition
      s = 1 << dut.pcfg.stride;
      pmin = -int'(dut.pcfg.sr); pmax = s * (int'(dut.pcfg.out_h) - 1) - int'(dut.pcfg.sr);
      qmin = -int'(dut.pcfg.sc); qmax = s * (int'(dut.pcfg.out_w) - 1) - int'(dut.pcfg.sc);
      if (dut.pcfg.k1x1) begin
        glo = $floor(real'(pmin) / 8.0); ghi = $floor(real'(pmax) / 8.0);
        pass_expect += (ghi - glo + 1) * (qmax - qmin + 1);
      end else begin
        glo = $floor(real'(pmin + 2) / 8.0); ghi = $floor(real'(pmax + 2) / 8.0);
        if (glo > 0) begin glo--; n_prime++; end
        pass_expect += (ghi - glo + 1) * (qmax - qmin + 3);
      end
    end
    if (dut.u_rf.busy) pass_cycles++;
    if (dut.swap) begin
      n_swap++;
      if (dut.job_two) n_twofeat++;
      else if (dut.pcfg.k1x1) n_onefeat1x1++;
    end
    if (dut.u_accu.u_mp.start) begin
      if (dut.u_accu.u_mp.pool3) n_pool3++; else n_pool2++;
    end
    if (dut.bk_wr_en)
      for (int i = 0; i < LANES; i++)
        if (dut.u_accu.u_ro.relu_q && dut.u_accu.u_ro.rd_data[i + 8 * int'(dut.u_accu.u_ro.hi1)] < 0)
          n_relu0++;
  end

  task automatic run_layer(input string name);
    longint t0;
    build_layer();
    reference();
    t0 = cycle;
    wait (cmdq.size() == 0);
    repeat (4) @(posedge clk);
    wait (!busy);
    repeat (2) @(posedge clk);
    $display("%s: done in %0d cycles", name, cycle - t0);
  endtask

  task automatic rand_layer_data(input int lo, input int hi, input int wlo, input int whi);
    for (int c = 0; c < MC; c++)
      for (int r = 0; r < MS; r++)
        for (int x = 0; x < MS; x++) img[c][r][x] = $urandom_range(0, hi - lo) + lo;
    for (int f = 0; f < MF; f++) begin
      bias[f] = $urandom_range(0, 255) - 128;
      for (int c = 0; c < MC; c++)
        for (int i = 0; i < MK; i++)
          for (int j = 0; j < MK; j++) wk[f][c][i][j] = $urandom_range(0, whi - wlo) + wlo;
    end
  endtask

  task automatic rand_weights(input int wlo, input int whi);
    for (int f = 0; f < MF; f++) begin
      bias[f] = $urandom_range(0, 255) - 128;
      for (int c = 0; c < MC; c++)
        for (int i = 0; i < MK; i++)
          for (int j = 0; j < MK; j++) wk[f][c][i][j] = $urandom_range(0, whi - wlo) + wlo;
    end
  endtask

  initial begin
    foreach (host_wdata[i]) host_wdata[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // conv1 + pool: 3 x 32x32 -> 64 x 16x16
    rand_layer_data(-512, 511, -24, 24);
    L_h = 32; L_w = 32; L_nch = 3; L_nf = 64; L_k = 5; L_stride = 1; L_pad = 2;
    L_oh = 32; L_ow = 32; L_1x1 = 0; L_relu = 1; L_pool = 1; L_pool3 = 0; L_in_set = 0;
    host_write_layer(0);
    run_layer("conv1");
    host_check_output(1, "conv1");

    // conv2 + pool: 64 x 16x16 -> 16 x 8x8, input left in set 1
    rand_weights(-6, 6);
    L_h = 16; L_w = 16; L_nch = 64; L_nf = 16; L_k = 5; L_stride = 1; L_pad = 2;
    L_oh = 16; L_ow = 16; L_1x1 = 0; L_relu = 1; L_pool = 1; L_pool3 = 0; L_in_set = 1;
    run_layer("conv2");
    host_check_output(0, "conv2");

    // conv3: 16 x 8x8 -> 16 x 8x8, input left in set 0
    rand_weights(-16, 16);
    L_h = 8; L_w = 8; L_nch = 16; L_nf = 16; L_k = 5; L_stride = 1; L_pad = 2;
    L_oh = 8; L_ow = 8; L_1x1 = 0; L_relu = 1; L_pool = 0; L_pool3 = 0; L_in_set = 0;
    run_layer("conv3");
    host_check_output(1, "conv3");

    checks++;
    if (pass_cycles != pass_expect) begin
      failures++;
      $display("pass streaming took %0d cycles, expected %0d", pass_cycles, pass_expect);
    end
    checks++;
    if (stat_passes != 64 * 4 * 2 + 16 * 4 * 32 + 16 * 4 * 8) begin
      failures++;
      $display("%0d passes, expected %0d", stat_passes, 64 * 4 * 2 + 16 * 4 * 32 + 16 * 4 * 8);
    end
    $display("passes=%0d stream cycles=%0d total cycles=%0d wstall=%0d pstall=%0d",
             stat_passes, pass_cycles, cycle, stat_wstall, stat_pstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
