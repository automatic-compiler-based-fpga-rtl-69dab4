// tb_mac_unit: random multiply-accumulate sequences against a software sum.
module tb_mac_unit;
  import train_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, clr;
  data_t pix, wt;
  acc_t acc;
  int checks = 0, failures = 0;
  mac_unit dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint s;
    en = 0; clr = 0; pix = 0; wt = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      s = 0;
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        clr = (i == 0);
        en  = ($urandom_range(3) != 0);
        pix = data_t'($urandom);
        wt  = data_t'($urandom);
        if (en) s = (i == 0 ? 0 : s) + longint'(pix) * longint'(wt);
        else if (i == 0) s = 0;
      end
      @(negedge clk); en = 0; clr = 0;
      checks++;
      if (longint'(acc) != s) begin failures++; $display("FAIL acc %0d exp %0d", acc, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
