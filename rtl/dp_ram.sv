// dp_ram: a dual-port (one read, one write) synchronous RAM, the model of
// one scratchpad lane memory.
//
// A read on `re` returns `mem[raddr]` on `rdata` one clock later. A write
// on `we` stores `wdata` at `waddr`. If both use the same address in the
// same cycle, the read returns the old value.
//
// A behavioural stand-in for a compiled dual-port SRAM macro (the
// architecture's scratchpad is dual-port SRAM). The ports are this
// design's own.
module dp_ram #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
