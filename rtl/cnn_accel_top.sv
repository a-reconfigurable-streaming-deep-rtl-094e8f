// cnn_accel_top: the streaming CNN accelerator.
//
// Data path: the buffer bank's input set streams two channels (one even,
// one odd) row group by row group into the COL buffer. The COL buffer
// feeds the 16-CU engine, whose merged partial sums are accumulated in the
// ACCU buffer's ping-pong scratchpad. Finished features are max-pooled
// there and read back, through ReLU, into the buffer bank's output set. The
// next layer uses that set as its input.
//
// Control path: the layer program enters through `cmd_*` into the 128-deep
// command FIFO and is executed by the command decoder. Filter weights and
// biases come from DRAM through the DMA stream `wt_*` into the pre-fetch
// controller, one 20-word packet per pass, in the order the decoder's loops
// consume them. The host reaches the buffer bank through `host_*` while
// `busy` is low, to load a layer's input and collect its output.
//
// The DRAM, the DMA engine and the AXI control bus are outside this block.
// The command stream and the host port stand in for them.
//
// The partition into blocks and their connections follow the architecture's
// block diagram. The port set, which stands in for the AXI bus and the DMA
// engine, is this design's own.
module cnn_accel_top
  import cnn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // command stream (from DRAM)
  input  logic               cmd_valid,
  input  logic [15:0]        cmd_data,
  output logic               cmd_ready,
  // weight stream (DMA, 64-bit beats)
  input  logic               wt_valid,
  input  logic [63:0]        wt_data,
  output logic               wt_ready,
  // host access to the buffer bank (only while !busy)
  input  logic               host_en,
  input  logic               host_we,
  input  logic               host_set,
  input  logic               host_bank,
  input  logic [BANK_AW-1:0] host_addr,
  input  data_t              host_wdata [LANES],
  output data_t              host_rdata [LANES],
  // status
  output logic               busy,
  output logic               halted,
  output logic [31:0]        stat_wstall,
  output logic [31:0]        stat_pstall,
  output logic [31:0]        stat_passes
);
  // command path
  logic        q_valid, q_ready;
  logic [15:0] q_data;

  cmd_fifo #(.WIDTH(16), .DEPTH(CMD_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .in_valid(cmd_valid), .in_data(cmd_data), .in_ready(cmd_ready),
    .out_valid(q_valid), .out_data(q_data), .out_ready(q_ready)
  );

  logic       w_ready, w_update, pass_start, pass_done, post_busy, swap;
  pass_cfg_t  pcfg;
  logic       job_two, job_pool, job_pool3, job_relu, job_bank_a, job_bank_b;
  logic [BANK_AW-1:0] job_base_a, job_base_b;

  cmd_decoder u_dec (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(q_valid), .cmd_data(q_data), .cmd_ready(q_ready),
    .w_ready(w_ready), .w_update(w_update),
    .pass_start(pass_start), .pass_cfg(pcfg), .pass_done(pass_done),
    .post_busy(post_busy), .swap(swap), .job_two(job_two), .job_pool(job_pool),
    .job_pool3(job_pool3), .job_relu(job_relu),
    .job_bank_a(job_bank_a), .job_base_a(job_base_a),
    .job_bank_b(job_bank_b), .job_base_b(job_base_b),
    .busy(busy), .halted(halted),
    .stat_wstall(stat_wstall), .stat_pstall(stat_pstall), .stat_passes(stat_passes)
  );

  data_t w [NSETS][3][3];
  data_t bias [2];

  prefetch_ctrl u_fc (
    .clk(clk), .rst_n(rst_n), .dma_valid(wt_valid), .dma_data(wt_data), .dma_ready(wt_ready),
    .update(w_update), .ready(w_ready), .w(w), .bias(bias)
  );

  // buffer bank
  logic               fetch_en;
  logic [BANK_AW-1:0] fetch_addr;
  data_t              fetch_rdata [NSETS][LANES];
  logic               bk_wr_en, bk_wr_bank;
  logic [BANK_AW-1:0] bk_wr_addr;
  data_t              bk_wr_data [LANES];

  buffer_bank u_bank (
    .clk(clk), .busy(busy), .in_set(pcfg.in_set),
    .fetch_en(fetch_en), .fetch_addr(fetch_addr), .fetch_rdata(fetch_rdata),
    .wr_en(bk_wr_en), .wr_bank(bk_wr_bank), .wr_addr(bk_wr_addr), .wr_data(bk_wr_data),
    .host_en(host_en), .host_we(host_we), .host_set(host_set), .host_bank(host_bank),
    .host_addr(host_addr), .host_wdata(host_wdata), .host_rdata(host_rdata)
  );

  // streaming front end
  localparam int unsigned FD = 256;
  logic cb_restart, cb_valid, cb_first, advance, en_in;
  logic [$clog2(FD+1)-1:0] cb_len;
  data_t rows [NSETS][LANES];
  data_t cu_data [NSETS][LANES][3];
  tag_t  tag_f, tag_o;

  row_fetch #(.FIFO_DEPTH(FD)) u_rf (
    .clk(clk), .rst_n(rst_n), .start(pass_start), .cfg(pcfg), .busy(), .done(pass_done),
    .fetch_en(fetch_en), .fetch_addr(fetch_addr), .bank_rdata(fetch_rdata),
    .cb_restart(cb_restart), .cb_valid(cb_valid), .cb_first_grp(cb_first), .cb_len(cb_len),
    .rows(rows), .advance(advance), .en_in(en_in), .tag(tag_f)
  );

  col_buffer #(.DEPTH(FD)) u_cb (
    .clk(clk), .rst_n(rst_n), .restart(cb_restart), .valid(cb_valid), .first_grp(cb_first),
    .len(cb_len), .bank_rows(rows), .cu_data(cu_data)
  );

  data_t out_a [LANES];
  data_t out_b [LANES];

  cu_engine u_cue (
    .clk(clk), .rst_n(rst_n), .advance(advance), .mode_1x1(pcfg.k1x1), .en_in(en_in),
    .tag_in(tag_f), .cu_data(cu_data), .w(w), .out_a(out_a), .out_b(out_b), .tag_out(tag_o)
  );

  accu_buffer u_accu (
    .clk(clk), .rst_n(rst_n), .tag(tag_o), .in_a(out_a), .in_b(out_b),
    .k1x1(pcfg.k1x1), .stride(pcfg.stride), .sr(pcfg.sr), .sc(pcfg.sc),
    .out_h(pcfg.out_h), .out_w(pcfg.out_w), .first(pcfg.first), .bias(bias),
    .swap(swap), .job_two(job_two), .job_pool(job_pool), .job_pool3(job_pool3),
    .job_relu(job_relu), .job_h(pcfg.out_h), .job_w(pcfg.out_w),
    .job_bank_a(job_bank_a), .job_base_a(job_base_a),
    .job_bank_b(job_bank_b), .job_base_b(job_base_b),
    .post_busy(post_busy), .sel(),
    .bk_wr_en(bk_wr_en), .bk_wr_bank(bk_wr_bank), .bk_wr_addr(bk_wr_addr), .bk_wr_data(bk_wr_data)
  );
endmodule
