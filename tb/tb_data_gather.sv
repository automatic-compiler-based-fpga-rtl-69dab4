// tb_data_gather: behavioural output and weight-update buffers are filled with
// random data; the DRAM write stream for FP convolution, pooling, loss,
// weight-update writes and WU convolution with and without load balancing is
// compared against a reference list built here (with the Fig. 5 circulant
// address formula written out independently). wr_ready stalls at random.
module tb_data_gather;
  import train_pkg::*;
  localparam int POX = 8, POY = 8, POF = 16, ODEPTH = 16, UDEPTH = 4096, ROWS = 256, KMAX = 4;
  localparam int NPIX = POX*POY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, ob_re, ub_re, wr_valid, wr_ready, busy, done;
  layer_cfg_t cfg;
  logic [2:0] ngroups;
  logic [15:0] n_outer;
  logic [3:0] ob_addr;
  logic [DW*NPIX-1:0] ob_rdata [POF];
  logic [DW*NPIX-1:0] obm [ODEPTH][POF];
  logic [11:0] ub_addr;
  data_t ub_g, ub_w, wr_data;
  data_t ubg [UDEPTH], ubw [UDEPTH];
  logic [AW-1:0] wr_addr;
  int checks = 0, failures = 0;
  data_gather dut (.*);

  always_ff @(posedge clk) begin
    if (ob_re) for (int i = 0; i < POF; i++) ob_rdata[i] <= obm[ob_addr][i];
    if (ub_re) begin ub_g <= ubg[ub_addr]; ub_w <= ubw[ub_addr]; end
  end

  logic [AW-1:0] ea [$];
  data_t ed [$];
  always @(posedge clk) begin
    wr_ready <= ($urandom_range(3) != 0);
    if (wr_valid && wr_ready) begin
      checks++;
      if (ea.size() == 0) begin failures++; $display("FAIL extra write"); end
      else begin
        logic [AW-1:0] a; data_t d;
        a = ea.pop_front(); d = ed.pop_front();
        if (a != wr_addr || d != wr_data) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d addr %0d/%0d data %0d/%0d", cfg.op, wr_addr, a, wr_data, d);
        end
      end
    end
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic data_t ob(int a, int lane, int p);
    return data_t'(obm[a][lane][DW*p +: DW]);
  endfunction
  task automatic run_op();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (ea.size() != 0) begin failures++; $display("FAIL %0d writes missing", ea.size()); end
    ea.delete(); ed.delete();
  endtask

  initial begin
    start = 0; cfg = '0; ngroups = 1; n_outer = 1;
    for (int a = 0; a < ODEPTH; a++) for (int l = 0; l < POF; l++)
      for (int p = 0; p < NPIX; p++) obm[a][l][DW*p +: DW] = DW'($urandom);
    for (int i = 0; i < UDEPTH; i++) begin ubg[i] = data_t'($urandom); ubw[i] = data_t'($urandom); end
    repeat (2) @(negedge clk); rst_n = 1;
    // FP convolution: maps f, rows, columns in order
    cfg.op = OP_CONV; cfg.phase = PH_FP; cfg.nof = 5; cfg.nox = 4; cfg.out_base = 1000;
    for (int f = 0; f < 5; f++) for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) begin
      ea.push_back(AW'(1000 + f*16 + y*4 + x)); ed.push_back(ob(0, f, y*POX + x));
    end
    run_op();
    // pooling with more maps than lanes
    cfg = '0; cfg.op = OP_POOL; cfg.nch = 20; cfg.nox = 3; cfg.out_base = 300;
    for (int c = 0; c < 20; c++) for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) begin
      ea.push_back(AW'(300 + c*9 + y*3 + x)); ed.push_back(ob(c/POF, c%POF, y*POX + x));
    end
    run_op();
    // loss: one value per class in lane c, pixel 0
    cfg = '0; cfg.op = OP_LOSS; cfg.nch = 10; cfg.out_base = 50;
    for (int c = 0; c < 10; c++) begin ea.push_back(AW'(50 + c)); ed.push_back(ob(0, c, 0)); end
    run_op();
    // weight update: gradients then weights
    cfg = '0; cfg.op = OP_WUPD; cfg.nelem = 7; cfg.batch_done = 1; cfg.out_base = 2000; cfg.out2_base = 3000;
    n_outer = 7;
    for (int e = 0; e < 7; e++) begin ea.push_back(AW'(3000 + e)); ed.push_back(ubg[e]); end
    for (int e = 0; e < 7; e++) begin ea.push_back(AW'(2000 + e)); ed.push_back(ubw[e]); end
    run_op();
    cfg.batch_done = 0;
    for (int e = 0; e < 7; e++) begin ea.push_back(AW'(3000 + e)); ed.push_back(ubg[e]); end
    run_op();
    // WU convolution: gradient kernels into the circulant weight image
    for (int lb = 0; lb < 2; lb++) begin
      int nk, ng, no, gpr;
      nk = 3; ng = lb ? 4 : 1; gpr = lb ? 2 : 1;
      cfg = '0; cfg.op = OP_CONV; cfg.phase = PH_WU; cfg.lb = lb[0]; cfg.nox = 4'(nk); cfg.nch = 6;
      cfg.nof = 3; cfg.wrow = 2; cfg.out_base = 5000;
      ngroups = 3'(ng); no = (6 + ng - 1) / ng; n_outer = 16'(no);
      for (int o = 0; o < no; o++) for (int g = 0; g < ng; g++) for (int f = 0; f < 3; f++)
        for (int ky = 0; ky < nk; ky++) for (int kx = 0; kx < nk; kx++) begin
          int row, col, word, gx, gy;
          row = 2 + o*ng + g;
          if (o*ng + g >= 6) continue;
          col = (f + row) % POF; word = row*KMAX*KMAX + ky*KMAX + kx;
          gx = g % gpr; gy = g / gpr;
          ea.push_back(AW'(5000 + word*POF + col));
          ed.push_back(ob(o, f, (gy*nk + ky)*POX + gx*nk + kx));
        end
      run_op();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
