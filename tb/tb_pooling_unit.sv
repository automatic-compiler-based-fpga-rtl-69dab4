// tb_pooling_unit: random 2x2 windows; checks maximum and its index.
module tb_pooling_unit;
  import train_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, first;
  data_t pix, max_q;
  logic [1:0] idx_q;
  int checks = 0, failures = 0;
  pooling_unit #(.K(2)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; first = 0; pix = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int m, mi, v;
      m = -100000; mi = 0;
      for (int d = 0; d < 4; d++) begin
        @(negedge clk);
        en = 1; first = (d == 0);
        v = (t % 5 == 0) ? 7 : int'($urandom_range(60000)) - 30000;
        pix = data_t'(v);
        if (v > m) begin m = v; mi = d; end
      end
      @(negedge clk); en = 0;
      checks += 2;
      if (int'(max_q) != m) failures++;
      if (int'(idx_q) != mi) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
