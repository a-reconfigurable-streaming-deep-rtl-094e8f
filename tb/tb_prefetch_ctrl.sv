// tb_prefetch_ctrl: streams random weight packets with random gaps and
// checks that the controller accepts exactly one packet ahead, raises
// `ready` only with a complete packet, holds the DMA stream while full,
// and on `update` presents each packet's words in the documented places.
`timescale 1ns/1ps
module tb_prefetch_ctrl;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic dma_valid = 0, dma_ready, update = 0, ready;
  logic [63:0] dma_data = '0;
  data_t w [NSETS][3][3];
  data_t bias [2];
  int checks = 0, failures = 0;
  int pk [8][WPKT_WORDS];
  int sent_beats = 0;

  prefetch_ctrl dut (.*);

  // DMA side: beats of packets 0..7, with random gaps
  always @(negedge clk) begin
    if (rst_n && sent_beats < 8 * WPKT_BEATS) begin
      int p, b;
      p = sent_beats / WPKT_BEATS; b = sent_beats % WPKT_BEATS;
      dma_valid <= $urandom_range(0, 2) != 0;
      dma_data  <= {16'(pk[p][4*b+3]), 16'(pk[p][4*b+2]), 16'(pk[p][4*b+1]), 16'(pk[p][4*b])};
    end else dma_valid <= 0;
  end
  always @(posedge clk) if (dma_valid && dma_ready) sent_beats <= sent_beats + 1;

  initial begin
    foreach (pk[p, i]) pk[p][i] = $urandom_range(0, 65535) - 32768;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 8; p++) begin
      int waited;
      waited = 0;
      @(negedge clk);
      while (!ready) begin @(negedge clk); waited++; end
      // while full, the stream must be held
      checks++;
      if (dma_ready) begin failures++; $display("dma_ready while full"); end
      // hold the packet a while: the next one must not overwrite it
      repeat ($urandom_range(0, 12)) @(negedge clk);
      update = 1;
      @(negedge clk); update = 0;
      checks += 2;
      if (int'(bias[0]) != pk[p][0]) failures++;
      if (int'(bias[1]) != pk[p][1]) failures++;
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            checks++;
            if (int'(w[s][r][c]) != pk[p][2 + 9 * s + 3 * r + c]) begin
              failures++; $display("packet %0d w[%0d][%0d][%0d]", p, s, r, c);
            end
          end
    end
    @(negedge clk);
    checks++;
    if (ready) begin failures++; $display("ready without a packet"); end
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
