// tb_global_controller: plays the DMA, sequencer and gather around the
// controller and checks the phase order LOAD-COMPUTE-DRAIN-STORE, the loop
// limits given to the sequencer, and that done waits for the last write.
module tb_global_controller;
  import train_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, mgr_start, mgr_done, rd_idle, wr_idle, seq_start, sum_all, seq_done;
  logic gat_start, gat_done;
  layer_cfg_t cfg_in, cfg;
  logic [2:0] ngroups, phase_id;
  logic [15:0] n_outer;
  logic [3:0] nk;
  int checks = 0, failures = 0;
  global_controller dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    start = 0; cfg_in = '0; mgr_done = 0; rd_idle = 1; wr_idle = 1; seq_done = 0; gat_done = 0; ngroups = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int eo, ek, es, w;
      cfg_in = '0;
      cfg_in.op = op_e'($urandom_range(4)); cfg_in.phase = phase_e'($urandom_range(2));
      cfg_in.nch = 8'($urandom_range(60) + 1); cfg_in.nk = 4'($urandom_range(3) + 1);
      cfg_in.nelem = 16'($urandom_range(500) + 1);
      ngroups = 3'($urandom_range(3) + 1);
      eo = cfg_in.nch; ek = 1; es = 0;
      if (cfg_in.op == OP_CONV && cfg_in.phase == PH_WU) begin eo = (cfg_in.nch + ngroups - 1) / ngroups; ek = cfg_in.nk; end
      else if (cfg_in.op == OP_CONV) begin ek = cfg_in.nk; es = 1; end
      else if (cfg_in.op == OP_POOL) ek = cfg_in.nk;
      else if (cfg_in.op == OP_WUPD) eo = cfg_in.nelem;
      chk(!busy && phase_id == 0, "idle");
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      chk(mgr_start && busy && phase_id == 1, "load start");
      rd_idle = 0;
      w = $urandom_range(10);
      repeat (w) begin @(negedge clk); chk(!seq_start && phase_id == 1, "waits for dma"); end
      mgr_done = 1; @(negedge clk); mgr_done = 0;
      repeat (3) begin @(negedge clk); chk(!seq_start, "waits for reads"); end
      rd_idle = 1;
      @(negedge clk);
      chk(seq_start && phase_id == 2, "compute start");
      chk(n_outer == 16'(eo) && nk == 4'(ek) && sum_all == es[0], "loop limits");
      repeat ($urandom_range(10)) @(negedge clk);
      seq_done = 1; @(negedge clk); seq_done = 0;
      chk(phase_id == 3, "drain");
      while (!gat_start) @(negedge clk);
      chk(phase_id == 4, "store");
      wr_idle = 0;
      repeat ($urandom_range(10)) @(negedge clk);
      gat_done = 1; @(negedge clk); gat_done = 0;
      repeat (3) begin @(negedge clk); chk(!done && busy, "waits for writes"); end
      wr_idle = 1;
      @(negedge clk);
      chk(done, "done");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
