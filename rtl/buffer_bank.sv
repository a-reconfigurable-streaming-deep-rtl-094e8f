// buffer_bank: the 96 KB on-chip buffer bank.
//
// The bank is built from four single-port RAMs of DEPTH x 128 bits, each
// holding eight 16-bit rows of one image column at one address. Set `in_set`
// holds the current layer's input and the other set collects its output.
// Within a set, Bank B (index 0) holds the even-numbered channels/features
// and Bank A (index 1) the odd-numbered ones. The fetch port reads the same
// address of both banks of the input set, 256 bits per cycle. The readout
// port writes one bank of the output set. The host port (the DRAM-side
// exchange) may reach any bank, but only while the accelerator is idle
// (`host_en` is ignored while `busy`).
//
// Layout (this design's choice): channel c of an H x W image sits in bank
// c%2 from address (c/2) * ceil(H/8) * W. Row group g, column x is at
// offset g*W + x, and row 8g+i is in lane i (bits 16i+15:16i).
//
// Timing: read data appear the clock after the request, on `fetch_rdata`
// or `host_rdata`.
module buffer_bank
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = BANK_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            busy,
  input  logic            in_set,
  // fetch port: read both banks of the input set
  input  logic            fetch_en,
  input  logic [AW-1:0]   fetch_addr,
  output data_t           fetch_rdata [NSETS][LANES],
  // readout port: write one bank of the output set
  input  logic            wr_en,
  input  logic            wr_bank,
  input  logic [AW-1:0]   wr_addr,
  input  data_t           wr_data [LANES],
  // host port
  input  logic            host_en,
  input  logic            host_we,
  input  logic            host_set,
  input  logic            host_bank,
  input  logic [AW-1:0]   host_addr,
  input  data_t           host_wdata [LANES],
  output data_t           host_rdata [LANES]
);
  logic [LANES*DATA_W-1:0] rd   [2][2];
  logic                    en   [2][2];
  logic                    we   [2][2];
  logic [AW-1:0]           addr [2][2];
  logic [LANES*DATA_W-1:0] wd   [2][2];
  logic                    host_q_set, host_q_bank;

  always_comb begin
    for (int s = 0; s < 2; s++)
      for (int b = 0; b < 2; b++) begin
        en[s][b] = 1'b0; we[s][b] = 1'b0; addr[s][b] = '0; wd[s][b] = '0;
        if (!busy) begin
          if (host_en && host_set == 1'(s) && host_bank == 1'(b)) begin
            en[s][b] = 1'b1; we[s][b] = host_we; addr[s][b] = host_addr;
            for (int i = 0; i < LANES; i++) wd[s][b][i*DATA_W +: DATA_W] = host_wdata[i];
          end
        end else if (1'(s) == in_set) begin
          en[s][b] = fetch_en; addr[s][b] = fetch_addr;
        end else if (wr_en && wr_bank == 1'(b)) begin
          en[s][b] = 1'b1; we[s][b] = 1'b1; addr[s][b] = wr_addr;
          for (int i = 0; i < LANES; i++) wd[s][b][i*DATA_W +: DATA_W] = wr_data[i];
        end
      end
  end

  for (genvar s = 0; s < 2; s++) begin : g_set
    for (genvar b = 0; b < 2; b++) begin : g_bank
      sp_ram #(.WIDTH(LANES*DATA_W), .DEPTH(DEPTH)) u_ram (
        .clk(clk), .en(en[s][b]), .we(we[s][b]), .addr(addr[s][b]),
        .wdata(wd[s][b]), .rdata(rd[s][b])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (host_en) begin
      host_q_set  <= host_set;
      host_q_bank <= host_bank;
    end
  end

  logic in_set_q;
  always_ff @(posedge clk) in_set_q <= in_set;

  always_comb begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < LANES; i++)
        fetch_rdata[b][i] = rd[in_set_q][b][i*DATA_W +: DATA_W];
    for (int i = 0; i < LANES; i++)
      host_rdata[i] = rd[host_q_set][host_q_bank][i*DATA_W +: DATA_W];
  end
endmodule
