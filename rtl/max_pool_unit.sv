// max_pool_unit: one max-pool unit, a four-input comparator with a
// feedback register.
//
// Each cycle the unit takes one column of its pooling window: three rows on
// I0..I2 for a 3x3 window, or two for a 2x2 window (then `use_i2` is low
// and I2 is ignored). The fourth comparator input is the feedback register,
// the running maximum of the columns already seen. On `first` (the
// window's first column) the feedback is ignored. On `last` the maximum of
// the whole window leaves on `out` with `out_en` for one cycle.
//
// Timing: `out`/`out_en` are registered, one clock after the last column.
//
// The comparator with feedback and the column-per-cycle scan follow the
// architecture. The first/last window flags are this design's interface.
module max_pool_unit
  import cnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid,
  input  logic  first,
  input  logic  last,
  input  logic  use_i2,
  input  data_t i0,
  input  data_t i1,
  input  data_t i2,
  output data_t out,
  output logic  out_en
);
  data_t fb, m;

  always_comb begin
    m = max2(i0, i1);
    if (use_i2) m = max2(m, i2);
    if (!first) m = max2(m, fb);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb <= '0; out <= '0; out_en <= 1'b0;
    end else begin
      out_en <= valid && last;
      if (valid) begin
        fb <= m;
        if (last) out <= m;
      end
    end
  end
endmodule
