// tb_row_fetch: runs passes with different shifts, strides, paddings and
// modes. An independent walk of the pass, written from its definition,
// checks cycle by cycle the bank address, the zero masking of rows and
// columns outside the image, the odd-channel mask, the tag (row group,
// output column, validity) and the pass length.
`timescale 1ns/1ps
module tb_row_fetch;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, busy, done;
  pass_cfg_t cfg;
  logic fetch_en;
  logic [BANK_AW-1:0] fetch_addr;
  data_t bank_rdata [NSETS][LANES];
  logic cb_restart, cb_valid, cb_first_grp, advance, en_in;
  logic [8:0] cb_len;
  data_t rows [NSETS][LANES];
  tag_t tag;
  int checks = 0, failures = 0;

  row_fetch dut (.*);

  // bank model: word value encodes address, set and lane
  always @(posedge clk)
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < LANES; i++)
        bank_rdata[s][i] <= fetch_en ? data_t'(int'(fetch_addr) * 16 + s * 8 + i + 1) : data_t'(16'h7777);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(bit k1, int st, int h, int w, int oh, int ow, int nch, int cp, int pad, int a, int b);
    int s, sr, sc, pmin, pmax, qmin, qmax, glo, ghi, qhi, base, ng, n, nvalid;
    s = st == 2 ? 2 : st == 4 ? 4 : 1;
    sr = pad - a; sc = pad - b;
    pmin = -sr; pmax = s * (oh - 1) - sr; qmin = -sc; qmax = s * (ow - 1) - sc;
    if (k1) begin glo = $floor(real'(pmin) / 8); ghi = $floor(real'(pmax) / 8); qhi = qmax; end
    else begin
      glo = $floor(real'(pmin + 2) / 8); ghi = $floor(real'(pmax + 2) / 8); qhi = qmax + 2;
      if (glo > 0) glo--;
    end
    ng = (h + 7) / 8; base = cp * ng * w;
    cfg = '0;
    cfg.k1x1 = k1; cfg.stride = (s == 4) ? 2'd2 : (s == 2) ? 2'd1 : 2'd0;
    cfg.in_h = dim_t'(h); cfg.in_w = dim_t'(w); cfg.out_h = dim_t'(oh); cfg.out_w = dim_t'(ow);
    cfg.nch = dim_t'(nch); cfg.cpair = dim_t'(cp); cfg.sr = crd_t'(sr); cfg.sc = crd_t'(sc);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    n = 0; nvalid = 0;
    for (int g = glo; g <= ghi; g++)
      for (int q = qmin; q <= qhi; q++) begin
        bit inimg; int qo; bit tv;
        inimg = g >= 0 && g < ng && q >= 0 && q < w;
        check("fetch_en", fetch_en, inimg);
        if (inimg) check("fetch_addr", fetch_addr, base + g * w + q);
        #1.5;   // past the next edge: registered controls of this position
        qo = k1 ? q : q - 2;
        tv = qo >= qmin && qo <= qmax && ((qo + sc) % s == 0);
        check("advance", advance, 1);
        check("tag.valid", tag.valid, tv);
        check("en_in", en_in, tv);
        check("first_grp", cb_first_grp, g == glo);
        if (tv) begin check("tag.g", tag.g, g); check("tag.q", tag.q, qo); nvalid++; end
        for (int ss = 0; ss < 2; ss++)
          for (int i = 0; i < LANES; i++)
            check("rows", rows[ss][i],
                  (inimg && 8 * g + i < h && (ss == 0 || 2 * cp + 1 < nch))
                  ? (base + g * w + q) * 16 + ss * 8 + i + 1 : 0);
        #0.5;   // back to the negedge
        n++;
      end
    check("busy after pass", busy, 0);
    check("valid columns", nvalid, (ghi - glo + 1) * ow);
    check("len", cb_len, qhi - qmin + 1);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0, 1, 12, 12, 12, 12, 3, 0, 2, 0, 0);   // 5x5 sub-filter (0,0), pad 2
    run(0, 1, 12, 12, 12, 12, 3, 1, 2, 3, 3);   // sub-filter (3,3), odd channel missing
    run(0, 4, 19, 19, 3, 3, 1, 0, 0, 9, 6);     // 11x11 stride 4, priming group
    run(1, 1, 16, 10, 16, 10, 4, 1, 0, 0, 0);   // 1x1
    run(1, 2, 16, 16, 8, 8, 2, 0, 0, 0, 0);     // 1x1 stride 2
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
