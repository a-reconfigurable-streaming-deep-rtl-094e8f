// max_pool: the max pooling module of the ACCU buffer.
//
// It pools one output feature in the scratchpad sub-buffer that is on the
// post side, and writes the pooled feature back into the same sub-buffer.
// The windows are K x K with K = 2 or 3 (`pool3`) and do not overlap: the
// pool stride is K. The pooled size is floor(OH/K) x floor(OW/K).
//
// Four max-pool units work on consecutive pooled rows. The module walks
// bands of pooled rows (four for K = 2, two for K = 3) and, within a band,
// the columns left to right. Each cycle it reads the band's 8 (K = 2) or
// 6 (K = 3) feature rows of one column, one per lane memory. The input MUX
// hands each unit the K rows of its window. A unit gives its maximum after
// K columns. The result is written to the pooled layout: pooled row PX,
// column PY at lane PX % 8, address (PX / 8) * PW + PY. Every location
// written in place has already been read, so the pooled feature can
// overwrite the raw one.
//
// The structure follows the paper: four units, each a comparator with
// feedback, behind an input MUX set by the pool size. The paper also sets
// the MUX by the convolution stride, because it leaves strided rows
// uncompacted. Here the accumulator stores strided results compacted, so
// only the pool size matters. Because rows of one column sit in separate
// lane memories, a K = 3 window that crosses an eight-row group boundary
// is read in one cycle. The paper's internal buffer for windows not yet
// ready is therefore not needed.
//
// Timing: `start` is taken when idle. It reads one column per cycle, so the
// run takes ceil(PH/U) * PW * K + 3 cycles. `done` pulses at the end.
module max_pool
  import cnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       pool3,
  input  dim_t       out_h,
  input  dim_t       out_w,
  input  logic       region_b,
  output logic       busy,
  output logic       done,
  output logic       rd_en   [SP_MEMS],
  output logic [7:0] rd_addr [SP_MEMS],
  input  data_t      rd_data [SP_MEMS],
  output logic       wr_en   [SP_MEMS],
  output logic [7:0] wr_addr [SP_MEMS],
  output data_t      wr_data [SP_MEMS]
);
  localparam int NU = 4;
  int  k, u_n, ph, pw, ow, px0, c, base;
  logic active;
  logic [1:0] drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; done <= 1'b0; drain <= '0;
      k <= 2; u_n <= 4; ph <= 0; pw <= 0; ow <= 0; px0 <= 0; c <= 0; base <= 0;
    end else begin
      done <= 1'b0;
      if (!active && drain == 0 && start) begin
        k    <= pool3 ? 3 : 2;
        u_n  <= pool3 ? 2 : 4;
        ph   <= int'(out_h) / (pool3 ? 3 : 2);
        pw   <= int'(out_w) / (pool3 ? 3 : 2);
        ow   <= int'(out_w);
        base <= region_b ? 256 : 0;
        px0  <= 0;
        c    <= 0;
        active <= (int'(out_h) >= (pool3 ? 3 : 2)) && (int'(out_w) >= (pool3 ? 3 : 2));
        drain  <= 2'd3;
      end else if (active) begin
        if (c == pw * k - 1) begin
          c <= 0;
          if (px0 + u_n >= ph) active <= 1'b0;
          px0 <= px0 + u_n;
        end else begin
          c <= c + 1;
        end
      end else if (drain != 0) begin
        drain <= drain - 1'b1;
        if (drain == 2'd1) done <= 1'b1;
      end
    end
  end

  assign busy = active || drain != 0;

  // Read the band's rows of column c.
  logic [3:0] mem_of [NU][3];   // lane memory that holds unit u's row r
  logic [8:0] rd_la  [NU][3];
  int         rd_row [NU][3];
  logic       u_ok   [NU];
  always_comb begin
    for (int u = 0; u < NU; u++) begin
      u_ok[u] = active && u < u_n && (px0 + u) < ph;
      for (int r = 0; r < 3; r++) begin
        rd_row[u][r] = k * (px0 + u) + r;
        rd_la[u][r]  = 9'((rd_row[u][r] >>> 3) * ow + c + base);
        mem_of[u][r] = {rd_la[u][r][8], 3'(rd_row[u][r])};
      end
    end
    for (int j = 0; j < SP_MEMS; j++) begin
      rd_en[j] = 1'b0; rd_addr[j] = '0;
    end
    for (int u = 0; u < NU; u++)
      for (int r = 0; r < 3; r++)
        if (u_ok[u] && r < k) begin
          rd_en[mem_of[u][r]]   = 1'b1;
          rd_addr[mem_of[u][r]] = rd_la[u][r][7:0];
        end
  end

  // Stage 1: compare. Stage 2: write back.
  logic [3:0] mem_q [NU][3];
  logic       ok_q  [NU];
  logic       first_q, last_q, k3_q;
  int         px_q, py_q;
  data_t      pout  [NU];
  logic       pen   [NU];
  int         px_q2, py_q2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q <= 1'b0; last_q <= 1'b0; k3_q <= 1'b0; px_q <= 0; py_q <= 0;
      px_q2 <= 0; py_q2 <= 0;
      for (int u = 0; u < NU; u++) begin
        ok_q[u] <= 1'b0;
        for (int r = 0; r < 3; r++) mem_q[u][r] <= '0;
      end
    end else begin
      first_q <= (c % k) == 0;
      last_q  <= (c % k) == k - 1;
      k3_q    <= k == 3;
      px_q    <= px0;
      py_q    <= c / k;
      px_q2   <= px_q;
      py_q2   <= py_q;
      for (int u = 0; u < NU; u++) begin
        ok_q[u] <= u_ok[u];
        for (int r = 0; r < 3; r++) mem_q[u][r] <= mem_of[u][r];
      end
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_unit
    max_pool_unit u_mpu (
      .clk(clk), .rst_n(rst_n), .valid(ok_q[u]), .first(first_q), .last(last_q),
      .use_i2(k3_q), .i0(rd_data[mem_q[u][0]]), .i1(rd_data[mem_q[u][1]]),
      .i2(rd_data[mem_q[u][2]]), .out(pout[u]), .out_en(pen[u])
    );
  end

  int         wr_px  [NU];
  logic [8:0] wr_la  [NU];
  logic [3:0] wr_mem [NU];
  always_comb begin
    for (int u = 0; u < NU; u++) begin
      wr_px[u]  = px_q2 + u;
      wr_la[u]  = 9'((wr_px[u] >>> 3) * pw + py_q2 + base);
      wr_mem[u] = {wr_la[u][8], 3'(wr_px[u])};
    end
    for (int j = 0; j < SP_MEMS; j++) begin
      wr_en[j] = 1'b0; wr_addr[j] = '0; wr_data[j] = '0;
    end
    for (int u = 0; u < NU; u++)
      if (pen[u]) begin
        wr_en[wr_mem[u]]   = 1'b1;
        wr_addr[wr_mem[u]] = wr_la[u][7:0];
        wr_data[wr_mem[u]] = pout[u];
      end
  end
endmodule
