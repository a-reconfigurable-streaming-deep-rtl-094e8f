// accumulator: adds the CU engine's partial sums into the scratchpad.
//
// Each cycle the CU engine gives up to 8 partial sums for feature A and, in
// 1x1 mode, 8 for feature B, all for decomposed output column q of row
// group g. The accumulator turns each one into an output position:
//   p = 8g + k - 2 (3x3) or 8g + k (1x1),  X = (p + sr) >> stride,
//   Y = (q + sc) >> stride.
// It drops a sum whose p + sr or q + sc is negative or not a multiple of
// the stride, or whose position lies outside the OH x OW output. This is
// how the shift addresses of a decomposed filter recombine the sub-filter
// outputs into one feature, and how a strided convolution keeps only its
// own positions.
//
// Scratchpad layout (this design's choice): the logical scratchpad has
// 8 row lanes and 512 addresses per sub-buffer. Position (X, Y) is lane
// X % 8 at address (X / 8) * OW + Y, plus 256 for feature B. Physically
// each lane is two 256-word memories; logical address bit 8 picks which,
// so memory j = lane + 8 * addr[8]. Features A and B thus never meet in
// one memory, and every partial sum of a cycle has a memory of its own.
//
// Read-modify-write: addresses are formed and the memories read in one
// cycle. The next cycle adds and writes back, with saturation. On a
// feature's first pass (`first`) nothing is read: the sum is written as
// bias + partial sum, which also clears what the previous feature left.
// A position is visited at most once per pass, so the two-cycle loop has
// no hazard.
module accumulator
  import cnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  tag_t       tag,
  input  data_t      in_a [LANES],
  input  data_t      in_b [LANES],
  input  logic       k1x1,
  input  logic [1:0] stride,
  input  crd_t       sr,
  input  crd_t       sc,
  input  dim_t       out_h,
  input  dim_t       out_w,
  input  logic       first,
  input  data_t      bias [2],
  // scratchpad port (the sub-buffer now pointed to the accumulator)
  output logic       rd_en   [SP_MEMS],
  output logic [7:0] rd_addr [SP_MEMS],
  input  data_t      rd_data [SP_MEMS],
  output logic       wr_en   [SP_MEMS],
  output logic [7:0] wr_addr [SP_MEMS],
  output data_t      wr_data [SP_MEMS]
);
  logic             src_ok  [2*LANES];
  logic [SP_LAW-1:0] src_adr [2*LANES];
  logic [2:0]       src_lane [2*LANES];
  data_t            src_val [2*LANES];
  logic [3:0]       src_mem [2*LANES];   // lane memory of each source

  always_comb begin
    for (int i = 0; i < 2*LANES; i++) begin
      int p, xs, ys, x, y, smask;
      smask = (1 << stride) - 1;
      p  = 8 * int'(tag.g) + (i % LANES) - (k1x1 ? 0 : 2);
      xs = p + int'(sr);
      ys = int'(tag.q) + int'(sc);
      x  = xs >>> stride;
      y  = ys >>> stride;
      src_ok[i]  = tag.valid && (i < LANES || k1x1) && xs >= 0 && ys >= 0
                   && (xs & smask) == 0 && (ys & smask) == 0
                   && x < int'(out_h) && y < int'(out_w);
      src_adr[i] = SP_LAW'((x >>> 3) * int'(out_w) + y + (i >= LANES ? 256 : 0));
      src_lane[i]= 3'(x);
      src_val[i] = (i < LANES) ? in_a[i % LANES] : in_b[i % LANES];
      src_mem[i] = {src_adr[i][8], src_lane[i]};
    end
  end

  // Stage 0: route each partial sum to its lane memory and read.
  logic       s1_ok   [SP_MEMS];
  logic [7:0] s1_row  [SP_MEMS];
  data_t      s1_val  [SP_MEMS];
  data_t      s1_bias [SP_MEMS];
  logic       s1_first;

  always_comb begin
    for (int j = 0; j < SP_MEMS; j++) begin
      rd_en[j] = 1'b0;
      rd_addr[j] = '0;
    end
    for (int i = 0; i < 2*LANES; i++)
      if (src_ok[i] && !first) begin
        rd_en[src_mem[i]]   = 1'b1;
        rd_addr[src_mem[i]] = src_adr[i][7:0];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_first <= 1'b0;
      for (int j = 0; j < SP_MEMS; j++) begin
        s1_ok[j] <= 1'b0; s1_row[j] <= '0; s1_val[j] <= '0; s1_bias[j] <= '0;
      end
    end else begin
      s1_first <= first;
      for (int j = 0; j < SP_MEMS; j++) s1_ok[j] <= 1'b0;
      for (int i = 0; i < 2*LANES; i++)
        if (src_ok[i]) begin
          s1_ok[src_mem[i]]   <= 1'b1;
          s1_row[src_mem[i]]  <= src_adr[i][7:0];
          s1_val[src_mem[i]]  <= src_val[i];
          s1_bias[src_mem[i]] <= (i < LANES) ? bias[0] : bias[1];
        end
    end
  end

  // Stage 1: add and write back.
  always_comb begin
    for (int j = 0; j < SP_MEMS; j++) begin
      wr_en[j]   = s1_ok[j];
      wr_addr[j] = s1_row[j];
      wr_data[j] = s1_first ? sat16(40'(s1_bias[j]) + 40'(s1_val[j]))
                            : sat16(40'(rd_data[j]) + 40'(s1_val[j]));
    end
  end
endmodule
