// pe: one processing engine of a 3x3 convolution unit.
//
// The PE holds one input datum in a D flip-flop. On each cycle with `shift`
// high it captures `din`, and the captured value leaves on `dout` towards
// the next PE of the same CU row, so the image streams right to left
// through the row. The PE multiplies the held datum by its filter weight.
// When `en` (the EN_Ctrl signal) is low the product is forced to zero, as
// the multiplier is switched off on columns a strided convolution skips.
//
// Timing: `dout` changes on the clock edge after `shift`. `prod` is
// combinational from the held datum, the weight and `en`. The full 32-bit
// product is kept; the CU adder rounds it.
//
// The multiply, the pass-on flip-flop and the EN_Ctrl gating follow the
// architecture. The Q8.8 operand format and the 32-bit product width are
// this design's choices.
module pe
  import cnn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 shift,
  input  data_t                din,
  input  data_t                weight,
  input  logic                 en,
  output data_t                dout,
  output logic signed [31:0]   prod
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     dout <= '0;
    else if (shift) dout <= din;
  end

  always_comb prod = en ? 32'(dout * weight) : 32'sd0;
endmodule
