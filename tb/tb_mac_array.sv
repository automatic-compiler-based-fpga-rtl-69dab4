// tb_mac_array: every MAC must sum pix[column] * wt[row] over a sequence;
// masked columns must not accumulate. Reduced size 3 x 2 x 4.
module tb_mac_array;
  import train_pkg::*;
  localparam int POX = 3, POY = 2, POF = 4, N = POX*POY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, clr;
  data_t pix [N];
  logic pix_ok [N];
  data_t wt [POF];
  acc_t acc [POF][N];
  longint ref_s [POF][N];
  int checks = 0, failures = 0;
  mac_array #(.POX(POX), .POY(POY), .POF(POF)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; clr = 0;
    for (int p = 0; p < N; p++) begin pix[p] = 0; pix_ok[p] = 1; end
    for (int f = 0; f < POF; f++) wt[f] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int p = 0; p < N; p++) pix_ok[p] = ($urandom_range(4) != 0);
      for (int f = 0; f < POF; f++) for (int p = 0; p < N; p++) ref_s[f][p] = 0;
      for (int i = 0; i < 9; i++) begin
        @(negedge clk);
        en = 1; clr = (i == 0);
        for (int p = 0; p < N; p++) pix[p] = data_t'($urandom_range(2000) - 1000);
        for (int f = 0; f < POF; f++) wt[f] = data_t'($urandom_range(2000) - 1000);
        for (int f = 0; f < POF; f++) for (int p = 0; p < N; p++)
          if (pix_ok[p]) ref_s[f][p] += longint'(pix[p]) * wt[f];
      end
      @(negedge clk); en = 0; clr = 0;
      for (int f = 0; f < POF; f++) for (int p = 0; p < N; p++) begin
        checks++;
        if (longint'(acc[f][p]) != ref_s[f][p]) begin
          failures++; if (failures < 10) $display("FAIL f%0d p%0d %0d exp %0d", f, p, acc[f][p], ref_s[f][p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
