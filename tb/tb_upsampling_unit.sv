// tb_upsampling_unit: 4x4 pooled gradients with random indices and AG bits,
// checked pixel by pixel on the 8x8 output.
module tb_upsampling_unit;
  import train_pkg::*;
  localparam int POX = 8, POY = 8, N = POX*POY;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, scale_en;
  data_t grad [N], dout [N];
  logic [1:0] idx [N];
  logic [N-1:0] ag;
  int checks = 0, failures = 0;
  upsampling_unit #(.POX(POX), .POY(POY), .K(2)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      en = 1; scale_en = t[0];
      ag = {$urandom, $urandom};
      for (int p = 0; p < N; p++) begin grad[p] = data_t'($urandom); idx[p] = 2'($urandom); end
      @(negedge clk); en = 0;
      for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) begin
        automatic int pi = (y/2)*POX + x/2;
        automatic int d = (y%2)*2 + x%2;
        automatic int e = (int'(idx[pi]) == d && (!scale_en || ag[y*POX+x])) ? int'(grad[pi]) : 0;
        checks++;
        if (int'(dout[y*POX+x]) != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
