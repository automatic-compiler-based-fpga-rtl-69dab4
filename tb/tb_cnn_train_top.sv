// tb_cnn_train_top: end-to-end test of the training engine at its default
// size (8 x 8 x 16 MAC array), with a behavioural DRAM.
//
// It runs one slice of a training iteration, each step as a layer
// descriptor, and checks every word written back to DRAM against a reference
// computed here from the same inputs:
//   1 FP conv 3 -> 16 maps, 3x3, pad 1, ReLU (stores activation gradients)
//   2 max pooling 2x2 of the 16 maps (stores pooling indices)
//   3 loss gradients, Euclidean and square hinge
//   4 upsampling of 16 pooled gradient maps, scaled by the stored AG
//   5 BP conv with transposed, flipped kernels 16 -> 3 maps, scaled by AG
//   6 WU conv (kernel gradients) with and without MAC load balancing
//   7 weight update over a batch of two images with momentum
// It counts how often each mechanism occurred and fails if one never did.
module tb_cnn_train_top;
  import train_pkg::*;

  localparam int POX = 8, POY = 8, POF = 16, KMAX = 4, KK = KMAX*KMAX;
  localparam int NIN = 3;          // FP input maps
  localparam int NX  = 8;          // map edge
  localparam int NWORDS = POF*KK*POF;   // one POF x POF square of kernel blocks

  // DRAM map
  localparam int A_IN   = 'h0000, A_W    = 'h1000, A_FP   = 'h3000, A_POOL = 'h3800;
  localparam int A_LIN  = 'h3A00, A_LAB  = 'h3A10, A_LOUT = 'h3A20, A_LOUT2 = 'h3A40;
  localparam int A_UPG  = 'h3B00, A_UP   = 'h3C00, A_BP   = 'h4000;
  localparam int A_WU   = 'h5000, A_WU2  = 'h6000, A_ACC1 = 'h7000, A_MOM  = 'h8000;
  localparam int A_NEWW = 'h9000, A_ACC2 = 'hA000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [2:0] phase_id;
  layer_cfg_t cfg;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [AW-1:0] dram_addr;
  data_t dram_wdata, dram_rdata;

  cnn_train_top dut (
    .clk, .rst_n, .start, .cfg_in(cfg), .busy, .done, .phase_id,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata
  );

  dram_model #(.DEPTH(65536)) u_dram (
    .clk, .rst_n, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata)
  );

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_fp = 0, n_bp = 0, n_wu_lb = 0, n_wu_nolb = 0, n_pool = 0, n_up = 0, n_loss_e = 0,
      n_loss_h = 0, n_wupd_acc = 0, n_wupd_new = 0, n_relu_zero = 0, n_pad = 0, n_stall = 0,
      n_idx_nonzero = 0, n_up_zero = 0;
  always @(posedge clk) if (dram_req && !dram_gnt) n_stall++;

  // ---------------- reference helpers ----------------
  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int rshift(longint v, int sh);
    if (sh == 0) return sat16(v);
    return sat16((v + (longint'(1) << (sh - 1))) >>> sh);
  endfunction
  function automatic int weaddr(int r, int j, int ky, int kx);   // circulant DRAM word
    return ((r*KK + ky*KMAX + kx) * POF) + ((j + r) % POF);
  endfunction
  function automatic int rd(int a);
    return int'(u_dram.mem[a]);
  endfunction
  task automatic wr(int a, int v);
    u_dram.mem[a] = data_t'(v);
  endtask
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // golden data
  int act [NIN][NX][NX];
  int W   [POF][POF][3][3];      // [input map r][output map j]
  int fpo [POF][NX][NX];
  int agb [POF][NX][NX];
  int pmax [POF][4][4], pidx [POF][4][4];
  int upg [POF][4][4], upo [POF][NX][NX];

  function automatic layer_cfg_t blank();
    layer_cfg_t c;
    c = '0;
    c.stride = 2'd1;
    c.nof = 8'(POF);
    return c;
  endfunction

  task automatic run(layer_cfg_t c, output int cycles);
    int t0;
    @(negedge clk);
    cfg = c; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  int comp_cycles;
  always @(posedge clk) if (phase_id == 3'd2) comp_cycles++;

  initial begin
    layer_cfg_t c;
    int cy, cwu_lb, cwu_nolb;
    start = 1'b0;
    cfg = '0;
    // ---------- data ----------
    for (int i = 0; i < NIN; i++) for (int y = 0; y < NX; y++) for (int x = 0; x < NX; x++) begin
      act[i][y][x] = $urandom_range(511) - 256;
      wr(A_IN + (i*NX + y)*NX + x, act[i][y][x]);
    end
    for (int r = 0; r < POF; r++) for (int j = 0; j < POF; j++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        W[r][j][ky][kx] = (r < NIN) ? int'($urandom_range(511)) - 256 : 0;
        wr(A_W + weaddr(r, j, ky, kx), W[r][j][ky][kx]);
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---------- 1: FP conv + ReLU ----------
    c = blank();
    c.op = OP_CONV; c.phase = PH_FP; c.nch = 8'(NIN); c.nk = 4'd3; c.pad = 2'd1;
    c.nix = 5'(NX); c.nox = 4'(NX); c.shift = 6'd8; c.relu = 1'b1; c.ag_base = 8'd0;
    c.nelem = 16'(NWORDS); c.in_base = AW'(A_IN); c.w_base = AW'(A_W); c.out_base = AW'(A_FP);
    run(c, cy);
    n_fp++;
    for (int f = 0; f < POF; f++) for (int y = 0; y < NX; y++) for (int x = 0; x < NX; x++) begin
      automatic longint s = 0;
      int v;
      for (int i = 0; i < NIN; i++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        automatic int iy = y + ky - 1, ix = x + kx - 1;
        if (iy >= 0 && iy < NX && ix >= 0 && ix < NX) s += longint'(act[i][iy][ix]) * W[i][f][ky][kx];
        else if (f == 0 && i == 0) n_pad++;
      end
      v = rshift(s, 8);
      agb[f][y][x] = (v > 0);
      fpo[f][y][x] = (v > 0) ? v : 0;
      if (v <= 0) n_relu_zero++;
      check("fp", rd(A_FP + (f*NX + y)*NX + x), fpo[f][y][x]);
    end
    $display("FP conv: %0d cycles", cy);

    // ---------- 2: max pooling ----------
    c = blank();
    c.op = OP_POOL; c.nch = 8'(POF); c.nk = 4'd2; c.nix = 5'(NX); c.nox = 4'd4;
    c.ag_base = 8'd0; c.in_base = AW'(A_FP); c.out_base = AW'(A_POOL);
    run(c, cy);
    n_pool++;
    for (int f = 0; f < POF; f++) for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) begin
      automatic int m = -100000, mi = 0;
      for (int d = 0; d < 4; d++) begin
        automatic int v = fpo[f][2*y + d/2][2*x + d%2];
        if (v > m) begin m = v; mi = d; end
      end
      pmax[f][y][x] = m; pidx[f][y][x] = mi;
      if (mi != 0) n_idx_nonzero++;
      check("pool", rd(A_POOL + (f*4 + y)*4 + x), m);
    end
    $display("pool: %0d cycles", cy);

    // ---------- 3: loss ----------
    for (int kind = 0; kind < 2; kind++) begin
      int a [10], yl [10];
      for (int i = 0; i < 10; i++) begin
        a[i] = $urandom_range(1023) - 512;
        yl[i] = (kind == 0) ? int'($urandom_range(511)) - 256 : ((i == 3) ? 256 : -256);
        wr(A_LIN + i, a[i]); wr(A_LAB + i, yl[i]);
      end
      c = blank();
      c.op = OP_LOSS; c.nch = 8'd10; c.nix = 5'd1; c.nox = 4'd1; c.shift = 6'd8;
      c.loss = kind ? LOSS_SQHINGE : LOSS_EUCLID;
      c.in_base = AW'(A_LIN); c.aux_base = AW'(A_LAB); c.out_base = AW'(kind ? A_LOUT2 : A_LOUT);
      run(c, cy);
      for (int i = 0; i < 10; i++) begin
        int e;
        if (kind == 0) e = a[i] - yl[i];
        else begin
          automatic int m = (yl[i] > 0) ? 256 - a[i] : 256 + a[i];
          e = (m <= 0) ? 0 : ((yl[i] > 0) ? -2*m : 2*m);
        end
        check(kind ? "hinge" : "euclid", rd((kind ? A_LOUT2 : A_LOUT) + i), sat16(e));
      end
      if (kind == 0) n_loss_e++; else n_loss_h++;
    end

    // ---------- 4: upsampling, scaled by AG ----------
    for (int f = 0; f < POF; f++) for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) begin
      upg[f][y][x] = $urandom_range(2001) - 1000;
      wr(A_UPG + (f*4 + y)*4 + x, upg[f][y][x]);
    end
    c = blank();
    c.op = OP_UPSAMP; c.nch = 8'(POF); c.nix = 5'd4; c.nox = 4'd4; c.relu = 1'b1;
    c.ag_base = 8'd0; c.in_base = AW'(A_UPG); c.out_base = AW'(A_UP);
    run(c, cy);
    n_up++;
    for (int f = 0; f < POF; f++) for (int y = 0; y < NX; y++) for (int x = 0; x < NX; x++) begin
      automatic int d = (y % 2)*2 + (x % 2);
      automatic int e = (pidx[f][y/2][x/2] == d && agb[f][y][x] != 0) ? upg[f][y/2][x/2] : 0;
      upo[f][y][x] = e;
      if (pidx[f][y/2][x/2] == d && agb[f][y][x] == 0) n_up_zero++;
      check("upsamp", rd(A_UP + (f*NX + y)*NX + x), e);
    end
    $display("upsampling: %0d cycles", cy);

    // ---------- 5: BP conv (transposed, flipped kernels), scaled by AG ----------
    c = blank();
    c.op = OP_CONV; c.phase = PH_BP; c.nch = 8'(POF); c.nof = 8'(NIN); c.nk = 4'd3; c.pad = 2'd1;
    c.nix = 5'(NX); c.nox = 4'(NX); c.shift = 6'd8; c.relu = 1'b1; c.ag_base = 8'd0;
    c.wrow = 8'd0; c.nelem = 16'd0;      // weights still on chip from FP
    c.in_base = AW'(A_UP); c.out_base = AW'(A_BP);
    run(c, cy);
    n_bp++;
    for (int i = 0; i < NIN; i++) for (int y = 0; y < NX; y++) for (int x = 0; x < NX; x++) begin
      automatic longint s = 0;
      int v;
      for (int j = 0; j < POF; j++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        automatic int iy = y + ky - 1, ix = x + kx - 1;
        if (iy >= 0 && iy < NX && ix >= 0 && ix < NX) s += longint'(upo[j][iy][ix]) * W[i][j][2-ky][2-kx];
      end
      v = rshift(s, 8);
      check("bp", rd(A_BP + (i*NX + y)*NX + x), agb[i][y][x] ? v : 0);
    end
    $display("BP conv: %0d cycles", cy);

    // ---------- 6: WU conv, with and without load balancing ----------
    for (int lb = 1; lb >= 0; lb--) begin
      int cc0;
      c = blank();
      c.op = OP_CONV; c.phase = PH_WU; c.nch = 8'(NIN); c.nk = 4'(NX); c.pad = 2'd1;
      c.nix = 5'(NX); c.nox = 4'd3; c.shift = 6'd14; c.lb = lb[0]; c.wrow = 8'd0;
      c.in_base = AW'(A_IN); c.w_base = AW'(A_UP); c.out_base = AW'(lb ? A_WU : A_WU2);
      cc0 = comp_cycles;
      run(c, cy);
      if (lb) begin n_wu_lb++; cwu_lb = comp_cycles - cc0; end
      else    begin n_wu_nolb++; cwu_nolb = comp_cycles - cc0; end
      for (int i = 0; i < NIN; i++) for (int f = 0; f < POF; f++)
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          automatic longint s = 0;
          for (int y = 0; y < NX; y++) for (int x = 0; x < NX; x++) begin
            automatic int iy = y + ky - 1, ix = x + kx - 1;
            if (iy >= 0 && iy < NX && ix >= 0 && ix < NX) s += longint'(act[i][iy][ix]) * upo[f][y][x];
          end
          check(lb ? "wu_lb" : "wu", rd((lb ? A_WU : A_WU2) + weaddr(i, f, ky, kx)), rshift(s, 14));
        end
      $display("WU conv lb=%0d: %0d cycles (compute %0d)", lb, cy, lb ? cwu_lb : cwu_nolb);
    end
    // compute phase: 64 steps per map group (+ start and done cycles);
    // all 3 maps in one group with balancing, one map per pass without
    check("wu compute cycles lb", cwu_lb, 1*64 + 2);
    check("wu compute cycles no lb", cwu_nolb, 3*64 + 2);

    // ---------- 7: weight update over a batch of two images ----------
    for (int e = 0; e < NWORDS; e++) wr(A_MOM + e, $urandom_range(401) - 200);
    c = blank();
    c.op = OP_WUPD; c.nelem = 16'(NWORDS); c.first_img = 1'b1; c.batch_done = 1'b0;
    c.aux2_base = AW'(A_WU); c.out2_base = AW'(A_ACC1); c.out_base = AW'(A_NEWW);
    c.alpha = 16'd131; c.beta = 16'd58982;
    run(c, cy);
    n_wupd_acc++;
    for (int e = 0; e < NWORDS; e++) check("acc1", rd(A_ACC1 + e), rd(A_WU + e));
    c.first_img = 1'b0; c.batch_done = 1'b1;
    c.in_base = AW'(A_ACC1); c.aux2_base = AW'(A_WU2); c.w_base = AW'(A_W); c.aux_base = AW'(A_MOM);
    c.out2_base = AW'(A_ACC2);
    run(c, cy);
    n_wupd_new++;
    for (int e = 0; e < NWORDS; e++) begin
      automatic int g  = sat16(longint'(rd(A_ACC1 + e)) + rd(A_WU2 + e));
      automatic longint bm = (longint'(rd(A_MOM + e)) * 58982 + 32768) >>> 16;
      automatic longint ag = (longint'(g) * 131 + 32768) >>> 16;
      check("acc2", rd(A_ACC2 + e), g);
      check("neww", rd(A_NEWW + e), sat16(longint'(rd(A_W + e)) + bm - ag));
    end
    $display("weight update (batch done): %0d cycles", cy);

    // ---------- mechanisms ----------
    $display("mechanisms: fp=%0d bp=%0d wu_lb=%0d wu=%0d pool=%0d idx!=0:%0d up=%0d up_zeroed=%0d loss_e=%0d loss_h=%0d wacc=%0d wnew=%0d relu0=%0d pad=%0d stall=%0d",
             n_fp, n_bp, n_wu_lb, n_wu_nolb, n_pool, n_idx_nonzero, n_up, n_up_zero, n_loss_e,
             n_loss_h, n_wupd_acc, n_wupd_new, n_relu_zero, n_pad, n_stall);
    if (n_fp == 0 || n_bp == 0 || n_wu_lb == 0 || n_wu_nolb == 0 || n_pool == 0 || n_idx_nonzero == 0 ||
        n_up == 0 || n_up_zero == 0 || n_loss_e == 0 || n_loss_h == 0 || n_wupd_acc == 0 ||
        n_wupd_new == 0 || n_relu_zero == 0 || n_pad == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL: a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
