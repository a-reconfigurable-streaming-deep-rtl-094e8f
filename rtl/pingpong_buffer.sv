// pingpong_buffer: the 16 KB scratchpad of the ACCU buffer, with its buffer
// mux.
//
// The scratchpad is two sub-buffers, Buffer A (index 0) and Buffer B
// (index 1). Each is 16 dual-port lane memories of 256 x 16 bits (see the
// accumulator for the address map). The buffer mux points sub-buffer `sel`
// to the accumulator port and the other one to the post port, which the
// max pool and readout blocks share. Flipping `sel` swaps the two
// directions. The accumulator then starts on the next feature while the
// finished feature is pooled and read out.
//
// Timing: read data return one clock after the read, from the sub-buffer
// that was selected when the read was made. `sel` may change at any clock;
// the user keeps both ports quiet around a swap.
//
// The two sub-buffers, the mux between the accumulator and the post side,
// the 16 KB size and the dual-port memories follow the architecture. The
// split into 16 lane memories per sub-buffer is this design's choice.
module pingpong_buffer
  import cnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sel,
  // accumulator port
  input  logic       a_rd_en   [SP_MEMS],
  input  logic [7:0] a_rd_addr [SP_MEMS],
  output data_t      a_rd_data [SP_MEMS],
  input  logic       a_wr_en   [SP_MEMS],
  input  logic [7:0] a_wr_addr [SP_MEMS],
  input  data_t      a_wr_data [SP_MEMS],
  // post (max pool / readout) port
  input  logic       p_rd_en   [SP_MEMS],
  input  logic [7:0] p_rd_addr [SP_MEMS],
  output data_t      p_rd_data [SP_MEMS],
  input  logic       p_wr_en   [SP_MEMS],
  input  logic [7:0] p_wr_addr [SP_MEMS],
  input  data_t      p_wr_data [SP_MEMS]
);
  logic       re [2][SP_MEMS];
  logic [7:0] ra [2][SP_MEMS];
  logic       we [2][SP_MEMS];
  logic [7:0] wa [2][SP_MEMS];
  data_t      wd [2][SP_MEMS];
  data_t      rd [2][SP_MEMS];
  logic       sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= 1'b0;
    else        sel_q <= sel;
  end

  always_comb begin
    for (int b = 0; b < 2; b++)
      for (int j = 0; j < SP_MEMS; j++) begin
        if (sel == 1'(b)) begin
          re[b][j] = a_rd_en[j]; ra[b][j] = a_rd_addr[j];
          we[b][j] = a_wr_en[j]; wa[b][j] = a_wr_addr[j]; wd[b][j] = a_wr_data[j];
        end else begin
          re[b][j] = p_rd_en[j]; ra[b][j] = p_rd_addr[j];
          we[b][j] = p_wr_en[j]; wa[b][j] = p_wr_addr[j]; wd[b][j] = p_wr_data[j];
        end
      end
    for (int j = 0; j < SP_MEMS; j++) begin
      a_rd_data[j] = rd[sel_q][j];
      p_rd_data[j] = rd[!sel_q][j];
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_buf
    for (genvar j = 0; j < SP_MEMS; j++) begin : g_mem
      dp_ram #(.WIDTH(DATA_W), .DEPTH(SP_DEPTH)) u_mem (
        .clk(clk), .re(re[b][j]), .raddr(ra[b][j]), .rdata(rd[b][j]),
        .we(we[b][j]), .waddr(wa[b][j]), .wdata(wd[b][j])
      );
    end
  end
endmodule
