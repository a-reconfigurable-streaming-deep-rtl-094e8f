// readout: copies one output feature from the scratchpad back to the
// buffer bank, applying ReLU on the way.
//
// The feature (raw, or pooled by the max pool block) occupies logical
// scratchpad addresses base .. base + ceil(H/8)*W - 1, eight rows per
// address. That is the same row-group layout the buffer bank uses, so the
// readout copies address i to bank address `bank_base` + i, one address
// (eight words) per cycle. With `relu` set, negative words are written as
// zero.
//
// Timing: `start` is taken when idle. A read is issued every cycle and
// written one cycle later. `done` pulses the cycle after the last write.
//
// Reading finished features back to the buffer bank follows the
// architecture. Applying ReLU here, and the one-word-per-cycle rate, are
// this design's choices.
module readout
  import cnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  dim_t               feat_h,
  input  dim_t               feat_w,
  input  logic               region_b,
  input  logic               relu,
  input  logic               bank,
  input  logic [BANK_AW-1:0] bank_base,
  output logic               busy,
  output logic               done,
  output logic               rd_en   [SP_MEMS],
  output logic [7:0]         rd_addr [SP_MEMS],
  input  data_t              rd_data [SP_MEMS],
  output logic               wr_en,
  output logic               wr_bank,
  output logic [BANK_AW-1:0] wr_addr,
  output data_t              wr_data [LANES]
);
  int   cnt, i, base;
  logic active, relu_q, bank_q, v1;
  logic [BANK_AW-1:0] bbase, a1;
  logic hi1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0; cnt <= 0; i <= 0; base <= 0;
      relu_q <= 1'b0; bank_q <= 1'b0; bbase <= '0;
      v1 <= 1'b0; a1 <= '0; hi1 <= 1'b0;
    end else begin
      done <= v1 && !active;
      v1   <= active;
      a1   <= BANK_AW'(int'(bbase) + i);
      hi1  <= 1'(((i + base) >>> 8) & 1);
      if (!active && !v1 && start) begin
        cnt    <= ((int'(feat_h) + 7) >>> 3) * int'(feat_w);
        i      <= 0;
        base   <= region_b ? 256 : 0;
        relu_q <= relu;
        bank_q <= bank;
        bbase  <= bank_base;
        active <= (feat_h != 0) && (feat_w != 0);
        done   <= (feat_h == 0) || (feat_w == 0);
      end else if (active) begin
        if (i == cnt - 1) active <= 1'b0;
        i <= i + 1;
      end
    end
  end

  assign busy = active || v1;

  always_comb begin
    for (int j = 0; j < SP_MEMS; j++) begin
      rd_en[j]   = active && ((j >= 8) == (((i + base) & 256) != 0));
      rd_addr[j] = 8'(i + base);
    end
    wr_en   = v1;
    wr_bank = bank_q;
    wr_addr = a1;
    for (int l = 0; l < LANES; l++) begin
      data_t d;
      d = rd_data[l + 8 * int'(hi1)];
      wr_data[l] = (relu_q && d < 0) ? '0 : d;
    end
  end
endmodule
