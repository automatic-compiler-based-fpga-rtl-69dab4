// tb_conv_controller: step sequence, first/last flags and cycle count
// (n_outer * nk * nk steps, done one cycle after the last step).
module tb_conv_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, hold, sum_all, busy, step, first, last, done;
  logic [15:0] n_outer, c;
  logic [3:0] nk, ky, kx;
  int checks = 0, failures = 0;
  conv_controller dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; hold = 0; sum_all = 0; n_outer = 0; nk = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int ec, ey, ex, steps, cycles;
      n_outer = 16'($urandom_range(5) + 1); nk = 4'($urandom_range(3) + 1); sum_all = t[0];
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      ec = 0; ey = 0; ex = 0; steps = 0; cycles = 0;
      while (!done) begin
        hold = ($urandom_range(4) == 0);
        #1;
        if (step) begin
          checks += 5;
          if (c != 16'(ec) || ky != 4'(ey) || kx != 4'(ex)) failures++;
          if (first != (ex == 0 && ey == 0 && (!sum_all || ec == 0))) failures++;
          if (last != (ex == nk-1 && ey == nk-1 && (!sum_all || ec == n_outer-1))) failures++;
          if (!busy) failures++;
          if (hold) failures++;
          steps++;
          ex++; if (ex == nk) begin ex = 0; ey++; if (ey == nk) begin ey = 0; ec++; end end
        end
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (steps != n_outer*nk*nk) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
