// tb_cmd_decoder: feeds layer programs to the command decoder and plays
// the parts around it: weights that arrive late, passes of random length
// and a post side that stays busy for a random time after each swap. It
// checks each pass's settings against the documented loop order (features,
// then shifts, then channel pairs), the first-pass flag, the shift offsets,
// the swap count and job fields, the stall counters, and END.
`timescale 1ns/1ps
module tb_cmd_decoder;
  import cnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic cmd_valid = 0, cmd_ready;
  logic [15:0] cmd_data = '0;
  logic w_ready = 0, w_update, pass_start, pass_done = 0, post_busy = 0, swap;
  pass_cfg_t pass_cfg;
  logic job_two, job_pool, job_pool3, job_relu, job_bank_a, job_bank_b;
  logic [BANK_AW-1:0] job_base_a, job_base_b;
  logic busy, halted;
  logic [31:0] stat_wstall, stat_pstall, stat_passes;
  int checks = 0, failures = 0;

  cmd_decoder dut (.*);

  logic [15:0] cmdq [$];
  always @(negedge clk) begin
    cmd_valid <= cmdq.size() > 0;
    cmd_data  <= cmdq.size() ? cmdq[0] : '0;
  end
  always @(posedge clk) if (cmd_valid && cmd_ready) void'(cmdq.pop_front());

  // environment: weights ready after a random wait, passes of random length,
  // post side busy for a random time after a swap
  int wwait = 0, plen = 0, pbusy = 0;
  always @(posedge clk) begin
    if (w_update) wwait <= $urandom_range(0, 40);
    else if (wwait > 0) wwait <= wwait - 1;
    if (pass_start) plen <= $urandom_range(1, 20);
    else if (plen > 0) plen <= plen - 1;
    if (swap) pbusy <= $urandom_range(10, 120);
    else if (pbusy > 0) pbusy <= pbusy - 1;
  end
  always_comb begin
    w_ready   = (wwait == 0);
    pass_done = (plen == 1);
    post_busy = (pbusy > 0);
  end

  // expected pass sequence
  typedef struct { int cp; int sr; int sc; bit first; } exp_t;
  exp_t expq [$];
  int exp_swaps [$];   // feature index of each swap
  int L_nf, L_nch, L_pad, L_oh, L_ow;
  bit L_1x1, L_pool;

  always @(posedge clk) if (rst_n) begin
    if (pass_start) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected pass"); end
      else begin
        exp_t e;
        e = expq.pop_front();
        if (int'(pass_cfg.cpair) != e.cp || int'(pass_cfg.sr) != e.sr || int'(pass_cfg.sc) != e.sc
            || pass_cfg.first != e.first || pass_cfg.k1x1 != L_1x1
            || int'(pass_cfg.out_h) != L_oh || int'(pass_cfg.nch) != L_nch) begin
          failures++;
          $display("pass got cp%0d sr%0d sc%0d first%0d, expected cp%0d sr%0d sc%0d first%0d",
                   pass_cfg.cpair, pass_cfg.sr, pass_cfg.sc, pass_cfg.first, e.cp, e.sr, e.sc, e.first);
        end
      end
    end
    if (swap) begin
      int f, fh, fw, slot;
      checks++;
      f = exp_swaps.size() ? exp_swaps.pop_front() : -1;
      fh = L_pool ? L_oh / 2 : L_oh; fw = L_pool ? L_ow / 2 : L_ow;
      slot = ((fh + 7) / 8) * fw;
      if (f < 0 || job_bank_a != 1'(f) || int'(job_base_a) != (f / 2) * slot
          || job_two != (L_1x1 && f + 1 < L_nf) || job_pool != L_pool
          || (L_1x1 && (job_bank_b != 1'(f + 1) || int'(job_base_b) != ((f + 1) / 2) * slot))) begin
        failures++; $display("swap job wrong for feature %0d", f);
      end
    end
  end

  task automatic layer(bit m1, int h, int w, int nch, int nf, int k, int pad, bit pool);
    int ke;
    L_1x1 = m1; L_nf = nf; L_nch = nch; L_pad = pad; L_pool = pool;
    L_oh = h + 2 * pad - k + 1; L_ow = w + 2 * pad - k + 1;
    ke = ((k + 2) / 3) * 3;
    cmdq.push_back(cmd(OP_IN_H, h)); cmdq.push_back(cmd(OP_IN_W, w));
    cmdq.push_back(cmd(OP_OUT_H, L_oh)); cmdq.push_back(cmd(OP_OUT_W, L_ow));
    cmdq.push_back(cmd(OP_NCH, nch)); cmdq.push_back(cmd(OP_NFEAT, nf));
    cmdq.push_back(cmd(OP_MODE, mode_word(m1, 1, 1, pool, 0, 0, pad)));
    cmdq.push_back(cmd(OP_CLR_SHIFT, 0));
    if (!m1)
      for (int a = 0; a < ke; a += 3)
        for (int b = 0; b < ke; b += 3) cmdq.push_back(cmd(OP_SHIFT, a | (b << 5)));
    cmdq.push_back(cmd(OP_RUN, 0));
    for (int f = 0; f < nf; f += (m1 ? 2 : 1)) begin
      for (int a = 0; a < (m1 ? 1 : ke); a += 3)
        for (int b = 0; b < (m1 ? 1 : ke); b += 3)
          for (int cp = 0; cp < (nch + 1) / 2; cp++)
            expq.push_back('{cp, pad - a, pad - b, (a == 0 && b == 0 && cp == 0)});
      exp_swaps.push_back(f);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    layer(0, 12, 12, 3, 3, 5, 2, 1);
    wait (cmdq.size() == 0); repeat (3) @(posedge clk); wait (!busy);
    layer(1, 8, 8, 5, 5, 1, 0, 0);
    wait (cmdq.size() == 0); repeat (3) @(posedge clk); wait (!busy);
    layer(0, 9, 9, 2, 2, 3, 1, 0);
    cmdq.push_back(cmd(OP_END, 0));
    wait (halted);
    repeat (3) @(posedge clk);
    checks += 5;
    if (expq.size() != 0) begin failures++; $display("%0d passes missing", expq.size()); end
    if (exp_swaps.size() != 0) begin failures++; $display("%0d swaps missing", exp_swaps.size()); end
    if (stat_wstall == 0) begin failures++; $display("no weight stall counted"); end
    if (stat_pstall == 0) begin failures++; $display("no post stall counted"); end
    if (busy) failures++;
    $display("passes=%0d wstall=%0d pstall=%0d", stat_passes, stat_wstall, stat_pstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
