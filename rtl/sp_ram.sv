// sp_ram: a single-port synchronous RAM, the model of one SRAM macro.
//
// One access per cycle: a write when `en` and `we` are high, otherwise a
// read when `en` is high. Read data appear on `rdata` the clock after the
// read and hold until the next read. Contents are not initialised.
//
// A behavioural stand-in for a compiled SRAM macro. The architecture uses
// single-port SRAM for the buffer bank; the macro's exact ports are not
// given, so these are this design's own.
module sp_ram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 1536,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
