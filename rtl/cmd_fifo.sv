// cmd_fifo: the 128-deep command FIFO.
//
// The layer program (configuration and execution commands) sits in DRAM
// and streams in through the write side when the accelerator is enabled.
// The command decoder pops it from the read side. It is a plain synchronous
// FIFO with valid/ready on both sides.
//
// Timing: a word written at one edge can be read from the next cycle. The
// read side shows the head word combinationally. Depth and width are
// parameters; the default depth of 128 words is the architecture's.
//
// The depth follows the architecture. The 16-bit word width (the width of
// the control bus) and the valid/ready handshake are this design's choices.
module cmd_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             in_ready,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data,
  input  logic             out_ready
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (push ? 1 : 0) - (pop ? 1 : 0);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
