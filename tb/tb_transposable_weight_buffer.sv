// tb_transposable_weight_buffer: loads random kernels in circulant order and
// reads them back in FP order (lane = output map) and in BP order (lane =
// input map, kernel rotated by 180 degrees). POF = 4, 8 rows, 3x3 kernels.
module tb_transposable_weight_buffer;
  import train_pkg::*;
  localparam int POF = 4, ROWS = 8, KMAX = 3, KK = KMAX*KMAX;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we, re, transpose;
  logic [1:0] wcol, j;
  logic [$clog2(ROWS*KK)-1:0] waddr;
  data_t wdata;
  logic [2:0] row;
  logic [3:0] ky, kx, nk;
  data_t rdata [POF];
  int W [ROWS][POF][KMAX][KMAX];
  int checks = 0, failures = 0;
  transposable_weight_buffer #(.POF(POF), .ROWS(ROWS), .KMAX(KMAX)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; re = 0; transpose = 0; wcol = 0; waddr = 0; wdata = 0; row = 0; j = 0;
    ky = 0; kx = 0; nk = 3;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) for (int f = 0; f < POF; f++)
      for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) begin
        W[r][f][y][x] = $urandom_range(60000) - 30000;
        @(negedge clk);
        we = 1; wcol = 2'((f + r) % POF); waddr = $bits(waddr)'(r*KK + y*KMAX + x);
        wdata = data_t'(W[r][f][y][x]);
      end
    @(negedge clk); we = 0;
    // FP reads
    for (int r = 0; r < ROWS; r++) for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) begin
      @(negedge clk); re = 1; transpose = 0; row = 3'(r); ky = 4'(y); kx = 4'(x);
      @(negedge clk); re = 0;
      for (int f = 0; f < POF; f++) begin
        checks++;
        if (int'(rdata[f]) != W[r][f][y][x]) begin failures++;
          if (failures < 10) $display("FAIL fp r%0d f%0d", r, f); end
      end
    end
    // BP reads of both squares
    for (int b = 0; b < 2; b++) for (int jj = 0; jj < POF; jj++)
      for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++) begin
        @(negedge clk); re = 1; transpose = 1; row = 3'(b*POF); j = 2'(jj); ky = 4'(y); kx = 4'(x);
        @(negedge clk); re = 0;
        for (int i = 0; i < POF; i++) begin
          checks++;
          if (int'(rdata[i]) != W[b*POF + i][jj][2-y][2-x]) begin failures++;
            if (failures < 10) $display("FAIL bp b%0d j%0d i%0d", b, jj, i); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
