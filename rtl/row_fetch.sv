// row_fetch: streams one pass (one channel pair, one sub-filter) from the
// buffer bank into the COL buffer and the CU engine.
//
// A pass convolves the even channel 2*cpair and the odd channel 2*cpair+1
// with one 3x3 sub-filter, or with two features' 1x1 weights. Sub-filter i
// of a decomposed large kernel has a shift address (a, b). Its decomposed
// output D(p, q) must be added at output position
//   X = (p + sr) / s,  Y = (q + sc) / s,   sr = pad - a,  sc = pad - b,
// where s is the stride. Only positions where p + sr and q + sc are
// non-negative multiples of s count. So the pass must produce D for p in
// [-sr, s*(OH-1) - sr] and q in [-sc, s*(OW-1) - sc]. Row p is made by
// CU k of row group g with p = 8g + k - 2 (3x3) or p = 8g + k (1x1). The
// pass therefore walks the row groups that cover this range. When the range
// does not start in group 0, one extra group comes first, to prime the
// COL-buffer FIFO. For each group the pass walks columns q_lo .. q_hi+2
// (3x3) or q_lo .. q_hi (1x1), one per cycle. Rows and columns outside
// the stored image read as zero, which gives the zero padding.
//
// The pass-level meaning (shift addresses, recombination by output
// position) follows the filter decomposition. Applying the shift when the
// results are accumulated, and this walk order, are this design's choice.
//
// EN_Ctrl (`en_in`) is low for columns the stride skips, which turns off
// the CU multipliers. The `tag` names the output column and row group that
// the CU engine will produce for this input column.
//
// Timing: `start` is taken when idle. The bank address leaves in the same
// cycle as the walk position. The COL-buffer and CU controls (`cb_*`,
// `advance`, `en_in`, `tag`, `rows`) are registered one cycle later to
// meet the bank read data; `cb_restart` is the start cycle itself.
// `done` pulses one cycle after the last column
// is presented. One column per clock, with no bubbles inside a pass.
module row_fetch
  import cnn_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  pass_cfg_t cfg,
  output logic      busy,
  output logic      done,
  // buffer bank fetch port
  output logic                  fetch_en,
  output logic [BANK_AW-1:0]    fetch_addr,
  input  data_t                 bank_rdata [NSETS][LANES],
  // COL buffer
  output logic                  cb_restart,
  output logic                  cb_valid,
  output logic                  cb_first_grp,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] cb_len,
  output data_t                 rows [NSETS][LANES],
  // CU engine
  output logic                  advance,
  output logic                  en_in,
  output tag_t                  tag
);
  logic signed [31:0] g_lo, g_hi, q_lo, q_hi, qin_hi, ng, base, smask;
  logic signed [31:0] g, qin;
  logic active;
  crd_t sc_q;
  logic k1x1_q, odd_ok;
  dim_t in_h_q, in_w_q;

  // Pass set-up, computed combinationally from cfg when start is taken.
  logic signed [31:0] s_n, p_min, p_max, qmin_n, qmax_n, glo_n, ghi_n, ng_n;
  always_comb begin
    s_n    = 1 << cfg.stride;
    p_min  = -int'(cfg.sr);
    p_max  = s_n * (int'(cfg.out_h) - 1) - int'(cfg.sr);
    qmin_n = -int'(cfg.sc);
    qmax_n = s_n * (int'(cfg.out_w) - 1) - int'(cfg.sc);
    ng_n   = (int'(cfg.in_h) + 7) >>> 3;
    if (cfg.k1x1) begin
      glo_n = p_min >>> 3;
      ghi_n = p_max >>> 3;
    end else begin
      glo_n = (p_min + 2) >>> 3;
      ghi_n = (p_max + 2) >>> 3;
      if (glo_n > 0) glo_n = glo_n - 1;   // priming group for the FIFO
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0;
      g_lo <= 0; g_hi <= 0; q_lo <= 0; q_hi <= 0; qin_hi <= 0; ng <= 0; base <= 0;
      smask <= 0; g <= 0; qin <= 0; sc_q <= '0; k1x1_q <= 1'b0; odd_ok <= 1'b0;
      in_h_q <= '0; in_w_q <= '0;
    end else begin
      done <= 1'b0;
      if (!active && start) begin
        active <= 1'b1;
        g_lo   <= glo_n;  g_hi <= ghi_n;
        q_lo   <= qmin_n; q_hi <= qmax_n;
        qin_hi <= cfg.k1x1 ? qmax_n : qmax_n + 2;
        ng     <= ng_n;
        base   <= int'(cfg.cpair) * ng_n * int'(cfg.in_w);
        smask  <= s_n - 1;
        g      <= glo_n;
        qin    <= qmin_n;
        sc_q   <= cfg.sc;
        k1x1_q <= cfg.k1x1;
        odd_ok <= (2 * int'(cfg.cpair) + 1) < int'(cfg.nch);
        in_h_q <= cfg.in_h;
        in_w_q <= cfg.in_w;
      end else if (active) begin
        if (qin == qin_hi) begin
          qin <= q_lo;
          if (g == g_hi) begin
            active <= 1'b0;
            done   <= 1'b1;
          end else begin
            g <= g + 1;
          end
        end else begin
          qin <= qin + 1;
        end
      end
    end
  end

  assign busy = active;

  // Bank request for the current walk position.
  logic in_img;
  always_comb begin
    in_img     = (g >= 0) && (g < ng) && (qin >= 0) && (qin < int'(in_w_q));
    fetch_en   = active && in_img;
    fetch_addr = BANK_AW'(base + g * int'(in_w_q) + qin);
  end

  // One cycle later: bank data, masks, controls.
  logic in_img_q, first_q, adv_q, en_q;
  logic signed [31:0] g_q;
  tag_t tag_n;
  always_comb begin
    int q_out;
    q_out = k1x1_q ? qin : qin - 2;
    tag_n.valid = active && (q_out >= q_lo) && (q_out <= q_hi)
                  && (((q_out + int'(sc_q)) & smask) == 0);
    tag_n.g     = crd_t'(g);
    tag_n.q     = crd_t'(q_out);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_img_q <= 1'b0; first_q <= 1'b0; adv_q <= 1'b0; en_q <= 1'b0; g_q <= 0;
      tag <= '0;
    end else begin
      in_img_q   <= active && in_img;
      first_q    <= (g == g_lo);
      adv_q      <= active;
      en_q       <= tag_n.valid;
      tag        <= tag_n;
      g_q        <= g;
    end
  end

  always_comb begin
    cb_restart   = !active && start;
    cb_valid     = adv_q;
    cb_first_grp = first_q;
    cb_len       = $bits(cb_len)'(qin_hi - q_lo + 1);
    advance      = adv_q;
    en_in        = en_q;
    for (int s = 0; s < NSETS; s++)
      for (int i = 0; i < LANES; i++)
        rows[s][i] = (in_img_q && (g_q * 8 + i) < int'(in_h_q) && (s == 0 || odd_ok))
                     ? bank_rdata[s][i] : '0;
  end
endmodule
