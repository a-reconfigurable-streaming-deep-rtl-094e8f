// conv_unit: a 3x3 convolution unit (CU) of nine processing engines.
//
// In 3x3 mode the three input rows Data_in<0..2> (top to bottom) enter the
// right-hand PEs (r,2) and shift left through PE (r,1) and PE (r,0), one
// column per `advance`. Once three columns are in, PE (r,c) holds column
// q+c of row r, so the adder forms the inner product of the 3x3 window whose
// left column is q with the weights w[r][c]. In 1x1 mode the input MUX
// sends Data_in<2> straight to PE (1,0) and PE (2,0). Those two PEs hold
// the weights of two different output features. Their products leave on
// `psum1x1[0]` and `psum1x1[1]` and bypass the adder; the other seven
// PEs are switched off.
//
// The layout follows the paper: nine PEs, the input MUX, the adder and the
// 1x1 use of PE (1,0) and PE (2,0). The weights are given as a port and
// are loaded by the pre-fetch controller. Rounding the Q16.16 sum to Q8.8
// with saturation is this design's own choice.
//
// Timing: data captured on an `advance` edge gives its result in `psum` /
// `psum1x1` one clock later, so the results are registered two cycles after
// the column is presented. `en_in` is the EN_Ctrl for the column presented
// with it. It is registered with the data, so a skipped column gives zero.
module conv_unit
  import cnn_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   advance,
  input  logic   mode_1x1,
  input  logic   en_in,
  input  data_t  data_in [3],
  input  data_t  w [3][3],
  output data_t  psum,
  output data_t  psum1x1 [2]
);
  data_t              din  [3][3];
  data_t              dout [3][3];
  logic signed [31:0] prod [3][3];
  logic               en_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       en_q <= 1'b0;
    else if (advance) en_q <= en_in;
  end

  // Input MUX ("Diff. Data Src"): row-wise shifting in 3x3 mode, broadcast
  // of one datum to PE (1,0) and PE (2,0) in 1x1 mode.
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      din[r][2] = data_in[r];
      din[r][1] = dout[r][2];
      din[r][0] = dout[r][1];
    end
    if (mode_1x1) begin
      din[1][0] = data_in[2];
      din[2][0] = data_in[2];
    end
  end

  for (genvar r = 0; r < 3; r++) begin : g_row
    for (genvar c = 0; c < 3; c++) begin : g_col
      logic pe_en;
      assign pe_en = en_q & (!mode_1x1 | (c == 0 && r != 0));
      pe u_pe (
        .clk(clk), .rst_n(rst_n), .shift(advance), .din(din[r][c]),
        .weight(w[r][c]), .en(pe_en), .dout(dout[r][c]), .prod(prod[r][c])
      );
    end
  end

  // Adder tree, disabled (held at zero) in 1x1 mode.
  logic signed [39:0] sum;
  always_comb begin
    sum = '0;
    if (!mode_1x1)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++)
          sum += 40'(prod[r][c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum       <= '0;
      psum1x1[0] <= '0;
      psum1x1[1] <= '0;
    end else begin
      psum       <= rescale(sum);
      psum1x1[0] <= rescale(40'(prod[1][0]));
      psum1x1[1] <= rescale(40'(prod[2][0]));
    end
  end
endmodule
