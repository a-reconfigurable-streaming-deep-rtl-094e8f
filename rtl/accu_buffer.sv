// accu_buffer: the ACCU buffer, with the accumulator, the ping-pong
// scratchpad, the max pool block and the readout block with ReLU.
//
// While the accumulator builds output feature n in one sub-buffer, the
// other sub-buffer holds feature n-1 and is on the post side. There it is
// max-pooled in place (if enabled) and then read out to the buffer bank
// through ReLU (if enabled). When the sequencer finishes a feature it
// raises `swap`. The ping-pong buffer flips its directions and the post
// job starts on the feature just finished, using the parameters given with
// `swap`. In 1x1 mode a job covers two features, A and B, which sit in the
// two halves of the sub-buffer.
//
// The structure (accumulator, ping-pong buffer, buffer mux, max pool,
// readout, ReLU at readout) follows the paper. The order of the post job,
// pool then read out with A before B, is this design's choice.
//
// Timing: `swap` is taken only when `post_busy` is low, and the sequencer
// must not raise it earlier. The post job starts the cycle after the swap.
module accu_buffer
  import cnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // from the CU engine
  input  tag_t       tag,
  input  data_t      in_a [LANES],
  input  data_t      in_b [LANES],
  // accumulation settings of the running pass
  input  logic       k1x1,
  input  logic [1:0] stride,
  input  crd_t       sr,
  input  crd_t       sc,
  input  dim_t       out_h,
  input  dim_t       out_w,
  input  logic       first,
  input  data_t      bias [2],
  // post job, given with swap
  input  logic       swap,
  input  logic       job_two,      // feature B present (1x1 mode)
  input  logic       job_pool,
  input  logic       job_pool3,
  input  logic       job_relu,
  input  dim_t       job_h,        // convolution output size
  input  dim_t       job_w,
  input  logic               job_bank_a,
  input  logic [BANK_AW-1:0] job_base_a,
  input  logic               job_bank_b,
  input  logic [BANK_AW-1:0] job_base_b,
  output logic       post_busy,
  output logic       sel,
  // buffer bank write port
  output logic               bk_wr_en,
  output logic               bk_wr_bank,
  output logic [BANK_AW-1:0] bk_wr_addr,
  output data_t              bk_wr_data [LANES]
);
  logic       a_rd_en [SP_MEMS], a_wr_en [SP_MEMS];
  logic [7:0] a_rd_addr [SP_MEMS], a_wr_addr [SP_MEMS];
  data_t      a_rd_data [SP_MEMS], a_wr_data [SP_MEMS];
  logic       p_rd_en [SP_MEMS], p_wr_en [SP_MEMS];
  logic [7:0] p_rd_addr [SP_MEMS], p_wr_addr [SP_MEMS];
  data_t      p_rd_data [SP_MEMS], p_wr_data [SP_MEMS];
  logic       mp_rd_en [SP_MEMS], ro_rd_en [SP_MEMS];
  logic [7:0] mp_rd_addr [SP_MEMS], ro_rd_addr [SP_MEMS];

  accumulator u_acc (
    .clk(clk), .rst_n(rst_n), .tag(tag), .in_a(in_a), .in_b(in_b),
    .k1x1(k1x1), .stride(stride), .sr(sr), .sc(sc), .out_h(out_h), .out_w(out_w),
    .first(first), .bias(bias),
    .rd_en(a_rd_en), .rd_addr(a_rd_addr), .rd_data(a_rd_data),
    .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data)
  );

  pingpong_buffer u_pp (
    .clk(clk), .rst_n(rst_n), .sel(sel),
    .a_rd_en(a_rd_en), .a_rd_addr(a_rd_addr), .a_rd_data(a_rd_data),
    .a_wr_en(a_wr_en), .a_wr_addr(a_wr_addr), .a_wr_data(a_wr_data),
    .p_rd_en(p_rd_en), .p_rd_addr(p_rd_addr), .p_rd_data(p_rd_data),
    .p_wr_en(p_wr_en), .p_wr_addr(p_wr_addr), .p_wr_data(p_wr_data)
  );

  // Post-job sequencer.
  typedef enum logic [2:0] {P_IDLE, P_POOL_A, P_POOL_B, P_RD_A, P_RD_B} pstate_e;
  pstate_e st;
  logic two_q, pool_q, pool3_q, relu_q, bank_a_q, bank_b_q, launched;
  dim_t h_q, w_q;
  logic [BANK_AW-1:0] base_a_q, base_b_q;
  logic mp_busy, mp_done, ro_done;
  dim_t fh, fw;

  always_comb begin
    fh = pool_q ? dim_t'(int'(h_q) / (pool3_q ? 3 : 2)) : h_q;
    fw = pool_q ? dim_t'(int'(w_q) / (pool3_q ? 3 : 2)) : w_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; sel <= 1'b0; launched <= 1'b0;
      two_q <= 1'b0; pool_q <= 1'b0; pool3_q <= 1'b0; relu_q <= 1'b0;
      bank_a_q <= 1'b0; bank_b_q <= 1'b0; h_q <= '0; w_q <= '0;
      base_a_q <= '0; base_b_q <= '0;
    end else begin
      launched <= 1'b0;
      case (st)
        P_IDLE: if (swap) begin
          sel <= !sel;
          two_q <= job_two; pool_q <= job_pool; pool3_q <= job_pool3; relu_q <= job_relu;
          h_q <= job_h; w_q <= job_w;
          bank_a_q <= job_bank_a; base_a_q <= job_base_a;
          bank_b_q <= job_bank_b; base_b_q <= job_base_b;
          st <= job_pool ? P_POOL_A : P_RD_A;
          launched <= 1'b1;
        end
        P_POOL_A: if (mp_done) begin
          st <= two_q ? P_POOL_B : P_RD_A; launched <= 1'b1;
        end
        P_POOL_B: if (mp_done) begin
          st <= P_RD_A; launched <= 1'b1;
        end
        P_RD_A: if (ro_done) begin
          if (two_q) begin st <= P_RD_B; launched <= 1'b1; end
          else st <= P_IDLE;
        end
        P_RD_B: if (ro_done) st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end

  assign post_busy = (st != P_IDLE);

  max_pool u_mp (
    .clk(clk), .rst_n(rst_n),
    .start(launched && (st == P_POOL_A || st == P_POOL_B)),
    .pool3(pool3_q), .out_h(h_q), .out_w(w_q), .region_b(st == P_POOL_B),
    .busy(mp_busy), .done(mp_done),
    .rd_en(mp_rd_en), .rd_addr(mp_rd_addr), .rd_data(p_rd_data),
    .wr_en(p_wr_en), .wr_addr(p_wr_addr), .wr_data(p_wr_data)
  );

  readout u_ro (
    .clk(clk), .rst_n(rst_n),
    .start(launched && (st == P_RD_A || st == P_RD_B)),
    .feat_h(fh), .feat_w(fw), .region_b(st == P_RD_B), .relu(relu_q),
    .bank(st == P_RD_B ? bank_b_q : bank_a_q),
    .bank_base(st == P_RD_B ? base_b_q : base_a_q),
    .busy(), .done(ro_done),
    .rd_en(ro_rd_en), .rd_addr(ro_rd_addr), .rd_data(p_rd_data),
    .wr_en(bk_wr_en), .wr_bank(bk_wr_bank), .wr_addr(bk_wr_addr), .wr_data(bk_wr_data)
  );

  // Post-side read port: the max pool and readout blocks never run together.
  always_comb begin
    for (int j = 0; j < SP_MEMS; j++) begin
      p_rd_en[j]   = mp_busy ? mp_rd_en[j]   : ro_rd_en[j];
      p_rd_addr[j] = mp_busy ? mp_rd_addr[j] : ro_rd_addr[j];
    end
  end

  // Handshake rule: a swap while the previous post job runs would lose it.
  a_swap_idle: assert property (@(posedge clk) disable iff (!rst_n) swap |-> !post_busy)
    else $error("accu_buffer: swap while post job busy");
endmodule
