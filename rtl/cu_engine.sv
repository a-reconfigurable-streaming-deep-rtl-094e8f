// cu_engine: the CU engine, sixteen 3x3 convolution units and the adders
// that merge the even-channel and odd-channel halves.
//
// Set 0 (eight CUs) works on an even-numbered input channel and set 1
// (eight CUs) on the odd-numbered channel paired with it. CU k of a set sees
// rows k-2, k-1 and k of the current eight-row group, as laid out by the
// COL buffer. Each set has its own weights. The 16 adders at the CU outputs
// follow the interleaving scheme:
//   3x3 mode: out_a[k] = even CU k + odd CU k; these are two channels'
//             contributions to one output feature. out_b is zero.
//   1x1 mode: out_a[k] = even PE(1,0) + odd PE(1,0), for feature A;
//             out_b[k] = even PE(2,0) + odd PE(2,0), for feature B.
// So the engine never emits more results per cycle than it takes in data.
//
// Timing: a column presented with `advance` comes out on out_a/out_b three
// clocks later. `tag_in` travels through a matching three-stage delay and
// leaves as `tag_out`. The tag's `valid` bit, not the data, says whether the
// output is meant. The adders saturate to 16 bits (this design's choice).
module cu_engine
  import cnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  advance,
  input  logic  mode_1x1,
  input  logic  en_in,
  input  tag_t  tag_in,
  input  data_t cu_data [NSETS][LANES][3],
  input  data_t w [NSETS][3][3],
  output data_t out_a [LANES],
  output data_t out_b [LANES],
  output tag_t  tag_out
);
  data_t psum    [NSETS][LANES];
  data_t psum1x1 [NSETS][LANES][2];

  for (genvar s = 0; s < NSETS; s++) begin : g_set
    for (genvar k = 0; k < LANES; k++) begin : g_cu
      conv_unit u_cu (
        .clk(clk), .rst_n(rst_n), .advance(advance), .mode_1x1(mode_1x1),
        .en_in(en_in), .data_in(cu_data[s][k]), .w(w[s]),
        .psum(psum[s][k]), .psum1x1(psum1x1[s][k])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LANES; k++) begin
        out_a[k] <= '0;
        out_b[k] <= '0;
      end
    end else begin
      for (int k = 0; k < LANES; k++) begin
        if (mode_1x1) begin
          out_a[k] <= sat16(40'(psum1x1[0][k][0]) + 40'(psum1x1[1][k][0]));
          out_b[k] <= sat16(40'(psum1x1[0][k][1]) + 40'(psum1x1[1][k][1]));
        end else begin
          out_a[k] <= sat16(40'(psum[0][k]) + 40'(psum[1][k]));
          out_b[k] <= '0;
        end
      end
    end
  end

  tag_t tag_d [3];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) tag_d[i] <= '0;
    end else begin
      tag_d[0] <= advance ? tag_in : '0;
      tag_d[1] <= tag_d[0];
      tag_d[2] <= tag_d[1];
    end
  end
  assign tag_out = tag_d[2];
endmodule
