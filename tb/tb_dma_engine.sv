// tb_dma_engine: read descriptors against the behavioural DRAM (with random
// grant stalls and 3-cycle latency) and a burst of gathered writes.
module tb_dma_engine;
  import train_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic desc_valid, desc_ready, sc_valid, sc_first, wr_valid, wr_ready, rd_idle, wr_idle;
  desc_t desc;
  dst_e sc_dst;
  data_t sc_data, wr_data, dram_wdata, dram_rdata;
  logic [AW-1:0] wr_addr, dram_addr;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  int checks = 0, failures = 0;
  dma_engine dut (.*);
  dram_model #(.DEPTH(4096)) u_dram (.clk, .rst_n, .req(dram_req), .we(dram_we), .addr(dram_addr),
    .wdata(dram_wdata), .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata));
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int got;
  int base_q, len_q;
  dst_e dst_q;
  always @(posedge clk) if (sc_valid) begin
    checks += 3;
    if (sc_data != u_dram.mem[base_q + got]) failures++;
    if (sc_first != (got == 0)) failures++;
    if (sc_dst != dst_q) failures++;
    got++;
  end
  initial begin
    desc_valid = 0; desc = '0; wr_valid = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = data_t'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      got = 0; base_q = $urandom_range(3000); len_q = $urandom_range(50) + 1; dst_q = dst_e'($urandom_range(6));
      @(negedge clk);
      desc_valid = 1; desc = '{dst_q, AW'(base_q), 16'(len_q)};
      #1; checks++; if (!desc_ready) failures++;
      @(negedge clk); desc_valid = 0;
      while (!rd_idle) @(negedge clk);
      checks++; if (got != len_q) failures++;
    end
    // writes
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      wr_valid = 1; wr_addr = AW'(3500 + i); wr_data = data_t'(i * 7 - 300);
      #1;
      while (!wr_ready) begin @(negedge clk); #1; end
      @(negedge clk); wr_valid = 0;
    end
    repeat (2) @(negedge clk);
    for (int i = 0; i < 100; i++) begin
      checks++; if (int'(u_dram.mem[3500 + i]) != i * 7 - 300) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
