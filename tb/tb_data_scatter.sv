// tb_data_scatter: streams of words for every destination; checks the buffer
// address each word is written to.
module tb_data_scatter;
  import train_pkg::*;
  localparam int POX = 8, POF = 16, NCH = 64, TI = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] nix;
  logic [3:0] nk;
  logic valid, first;
  dst_e dst;
  data_t data, wdata;
  logic ib_we, tw_we;
  logic [5:0] ib_ch;
  logic [3:0] ib_y, ib_x, tw_col;
  logic [11:0] tw_addr, wu_addr;
  logic [POF-1:0] lg_we;
  logic [5:0] lg_addr;
  logic [3:0] wu_we;
  int checks = 0, failures = 0;
  data_scatter #(.POX(POX), .POF(POF), .NCH(NCH), .TI(TI)) dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic cond);
    checks++; if (!cond) failures++;
  endtask
  initial begin
    valid = 0; first = 0; dst = DST_INPUT; data = 0; nix = 0; nk = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int d = 0; d < 7; d++) begin
      int n, e;
      nix = 5'($urandom_range(7) + 2); nk = 4'($urandom_range(6) + 2);
      dst = dst_e'(d);
      n = (d == 0) ? 3*nix*nix : (d == 2) ? 3*nk*nk : 100;
      e = 0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        valid = ($urandom_range(3) != 0) || (i == 0);
        if (!valid) begin i--; continue; end
        first = (e == 0); data = data_t'($urandom);
        #1;
        chk(wdata == data);
        unique case (dst)
          DST_INPUT: chk(ib_we && ib_ch == 6'(e / (nix*nix)) && ib_y == 4'((e / nix) % nix) && ib_x == 4'(e % nix));
          DST_WEIGHT: chk(tw_we && tw_col == 4'(e % POF) && tw_addr == 12'(e / POF));
          DST_LGRAD: chk(lg_we == (16'(1) << (e / (nk*nk))) &&
                         lg_addr == 6'(((e / nk) % nk) * POX + e % nk));
          DST_OLDW: chk(wu_we == 4'b0001 && wu_addr == 12'(e));
          DST_MOMG: chk(wu_we == 4'b0010 && wu_addr == 12'(e));
          DST_OLDG: chk(wu_we == 4'b0100 && wu_addr == 12'(e));
          DST_CURG: chk(wu_we == 4'b1000 && wu_addr == 12'(e));
          default: ;
        endcase
        e++;
      end
      @(negedge clk); valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
