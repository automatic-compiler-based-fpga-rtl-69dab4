// tb_address_translator: reproduces the 4-column example of the transposable
// buffer figure (kernel "rc" = input map r, output map c, 1-based) and checks
// FP/BP read addresses, rotations and 180-degree kernel flips.
module tb_address_translator;
  localparam int POF = 4, ROWS = 8, KMAX = 3, KK = KMAX*KMAX;
  logic transpose;
  logic [2:0] row;
  logic [1:0] j, rot, w_j, w_col;
  logic [3:0] ky, kx, nk, w_ky, w_kx;
  logic [$clog2(ROWS*KK)-1:0] raddr [POF], w_addr;
  logic [2:0] w_row;
  int checks = 0, failures = 0;
  address_translator #(.POF(POF), .ROWS(ROWS), .KMAX(KMAX)) dut (.*);
  // column contents printed in the figure, listed by address 0..3
  int fig [4][4] = '{'{101, 204, 303, 402}, '{102, 201, 304, 403},
                     '{103, 202, 301, 404}, '{104, 203, 302, 401}};
  task automatic chk(string s, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", s, got, exp); end
  endtask
  initial begin
    // write side: kernel (r, c) must land where the figure shows it
    w_ky = 0; w_kx = 0;
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
      w_row = 3'(r); w_j = 2'(c); #1;
      chk("fig column", fig[w_col][w_addr / KK], (r+1)*100 + c + 1);
      chk("fig addr", int'(w_addr) % KK, 0);
    end
    nk = 4'd3; ky = 0; kx = 0;
    // FP: all columns read the same address (table row FP: 0 0 0 0)
    transpose = 0; j = 0;
    for (int r = 0; r < 4; r++) begin
      row = 3'(r); #1;
      for (int c = 0; c < 4; c++) chk("fp addr", int'(raddr[c]), r*KK);
      chk("fp rot", rot, r);
    end
    // BP of output map 1: column c reads address c (table row BP: 0 1 2 3)
    transpose = 1; row = 0; j = 0; #1;
    for (int c = 0; c < 4; c++) chk("bp addr (table)", int'(raddr[c]) / KK, c);
    // BP in general: lane i of the rotated data must be kernel (i, j)
    for (int jj = 0; jj < 4; jj++) begin
      j = 2'(jj); #1;
      for (int i = 0; i < 4; i++) begin
        automatic int c = (i + jj) % 4;
        chk("bp data", fig[c][int'(raddr[c]) / KK], (i+1)*100 + jj + 1);
      end
    end
    // kernel flip in BP, straight in FP
    ky = 0; kx = 1; transpose = 1; j = 0; #1;
    chk("flip", int'(raddr[0]) % KK, 2*KMAX + 1);
    transpose = 0; #1;
    chk("noflip", int'(raddr[0]) % KK, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
