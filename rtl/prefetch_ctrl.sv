// prefetch_ctrl: the pre-fetch controller (FC) of the CU engine.
//
// Filter weights live in DRAM and reach the accelerator through a 64-bit
// DMA stream. The controller keeps a shadow register for the next pass's
// weight packet and fills it while the current pass runs. At the start of
// a pass the sequencer raises `update`, the synchronised filter-update
// request. The shadow packet then moves into the active registers that
// feed the PEs, and the next packet is fetched. If the shadow packet is not
// complete when a pass wants to start, `ready` is low and the sequencer
// waits; that is the only weight stall.
//
// Packet layout (this design's choice): 20 16-bit words in five 64-bit
// beats, lowest word first in each beat.
//   word 0       bias of feature A (used on a feature's first pass)
//   word 1       bias of feature B (1x1 mode)
//   words 2..10  even-set weights w[r][c] at 2 + 3r + c
//   words 11..19 odd-set weights  w[r][c] at 11 + 3r + c
// In 1x1 mode feature A's weight sits at (1,0) and feature B's at (2,0),
// the two PEs the CU uses then.
//
// Timing: `ready` is high when a full packet waits in the shadow register.
// On `update` with `ready` the outputs change on the next edge.
module prefetch_ctrl
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        dma_valid,
  input  logic [63:0] dma_data,
  output logic        dma_ready,
  input  logic        update,
  output logic        ready,
  output data_t       w [NSETS][3][3],
  output data_t       bias [2]
);
  data_t shadow [WPKT_WORDS];
  data_t active [WPKT_WORDS];
  logic [2:0] beat;
  logic full;

  assign dma_ready = !full;
  assign ready     = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0;
      full <= 1'b0;
      for (int i = 0; i < WPKT_WORDS; i++) begin
        shadow[i] <= '0;
        active[i] <= '0;
      end
    end else begin
      if (update && full) begin
        for (int i = 0; i < WPKT_WORDS; i++) active[i] <= shadow[i];
        full <= 1'b0;
      end else if (dma_valid && !full) begin
        for (int j = 0; j < 4; j++) shadow[4*beat + 3'(j)] <= dma_data[16*j +: 16];
        if (beat == 3'(WPKT_BEATS - 1)) begin
          beat <= '0;
          full <= 1'b1;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  always_comb begin
    bias[0] = active[0];
    bias[1] = active[1];
    for (int s = 0; s < NSETS; s++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          w[s][r][c] = active[2 + 9*s + 3*r + c];
  end
endmodule
