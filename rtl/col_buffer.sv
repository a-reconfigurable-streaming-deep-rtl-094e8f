// col_buffer: the COL buffer between the buffer bank and the CU engine.
//
// Each cycle the buffer bank delivers eight rows (8g..8g+7) of one column
// of the even channel and eight of the odd channel. A 3x3 window needs two
// rows more than that, so each set has a two-row FIFO. The FIFO returns
// rows 8g-2 and 8g-1 of the same column, saved while the previous row group
// streamed, and stores rows 8g+6 and 8g+7 for the next group. The remapping
// stage then forms ten overlapping rows and gives CU k the triple
// (8g+k-2, 8g+k-1, 8g+k). That lets eight CUs per set run in parallel from
// eight fetched rows.
//
// The FIFO is a circular buffer whose length is `len`, the number of columns
// streamed per row group. Each column reads out its old entry and writes its
// new one in the same cycle. With `first_grp` high (the first row group of
// a pass) the FIFO output reads as zero, which gives the zero rows above
// the image. DEPTH (the longest row) is this design's choice.
//
// Timing: `cu_data` is combinational from `bank_even`/`bank_odd` and the
// FIFO. The FIFO pointer moves on each `valid` clock and is cleared by
// `restart`.
module col_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  restart,
  input  logic  valid,
  input  logic  first_grp,
  input  logic [$clog2(DEPTH+1)-1:0] len,
  input  data_t bank_rows [NSETS][LANES],
  output data_t cu_data [NSETS][LANES][3]
);
  localparam int PW = $clog2(DEPTH);
  data_t fifo_mem [NSETS][2][DEPTH];
  logic [PW-1:0] ptr;
  data_t rows10 [NSETS][LANES+2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (restart) ptr <= '0;
    else if (valid) ptr <= (32'(ptr) + 1 >= 32'(len)) ? '0 : ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (valid)
      for (int s = 0; s < NSETS; s++)
        for (int j = 0; j < 2; j++)
          fifo_mem[s][j][ptr] <= bank_rows[s][LANES-2+j];
  end

  always_comb begin
    for (int s = 0; s < NSETS; s++) begin
      for (int j = 0; j < 2; j++)
        rows10[s][j] = first_grp ? '0 : fifo_mem[s][j][ptr];
      for (int k = 0; k < LANES; k++)
        rows10[s][k+2] = bank_rows[s][k];
      // Remapping: CU k takes rows k-2, k-1, k of the group.
      for (int k = 0; k < LANES; k++)
        for (int r = 0; r < 3; r++)
          cu_data[s][k][r] = rows10[s][k+r];
    end
  end
endmodule
