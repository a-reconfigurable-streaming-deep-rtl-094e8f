// tb_readout: preloads a behavioural scratchpad and checks that the
// readout block writes every eight-row address of a feature to the
// buffer bank, with and without ReLU, from either half, at one address per
// cycle.
`timescale 1ns/1ps
module tb_readout;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, region_b = 0, relu = 0, bank = 0, busy, done;
  dim_t feat_h = '0, feat_w = '0;
  logic [BANK_AW-1:0] bank_base = '0;
  logic rd_en [SP_MEMS];
  logic [7:0] rd_addr [SP_MEMS];
  data_t rd_data [SP_MEMS];
  logic wr_en, wr_bank;
  logic [BANK_AW-1:0] wr_addr;
  data_t wr_data [LANES];
  int checks = 0, failures = 0;
  data_t mem [SP_MEMS][256];
  int nwr;

  readout dut (.*);

  always @(posedge clk)
    for (int j = 0; j < SP_MEMS; j++)
      if (rd_en[j]) rd_data[j] <= mem[j][rd_addr[j]];

  always @(posedge clk) if (rst_n && wr_en) begin
    int la;
    la = int'(wr_addr) - int'(bank_base) + (region_b ? 256 : 0);
    checks++;
    if (wr_bank != bank) failures++;
    for (int i = 0; i < LANES; i++) begin
      int v;
      v = int'(mem[i + 8 * (la / 256)][la % 256]);
      if (relu && v < 0) v = 0;
      checks++;
      if (int'(wr_data[i]) != v) begin
        failures++;
        if (failures < 8) $display("addr %0d lane %0d: %0d exp %0d", wr_addr, i, wr_data[i], v);
      end
    end
    nwr++;
  end

  task automatic run(int h, int w, bit b, bit r, bit bk, int base);
    int cyc;
    foreach (mem[j, a]) mem[j][a] = data_t'($urandom);
    nwr = 0;
    @(negedge clk);
    feat_h = dim_t'(h); feat_w = dim_t'(w); region_b = b; relu = r; bank = bk;
    bank_base = BANK_AW'(base); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (nwr != ((h + 7) / 8) * w) begin failures++; $display("writes %0d", nwr); end
    if (cyc != ((h + 7) / 8) * w + 2) begin failures++; $display("cycles %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(6, 6, 0, 1, 1, 100);
    run(16, 16, 1, 0, 0, 0);
    run(40, 60, 0, 1, 0, 500);   // crosses address 256
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
