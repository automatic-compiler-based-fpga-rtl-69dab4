// tb_lane_ram: lane-masked writes and one-cycle reads against a model.
module tb_lane_ram;
  localparam int LANES = 3, LW = 12, DEPTH = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [LANES-1:0] we;
  logic [3:0] waddr, raddr;
  logic [LW-1:0] wdata [LANES], rdata [LANES];
  logic re;
  logic [LW-1:0] model [DEPTH][LANES];
  int checks = 0, failures = 0;
  lane_ram #(.LANES(LANES), .LW(LW), .DEPTH(DEPTH)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = '1; re = 0; raddr = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); waddr = 4'(a);
      for (int l = 0; l < LANES; l++) begin wdata[l] = LW'($urandom); model[a][l] = wdata[l]; end
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      we = LANES'($urandom); waddr = 4'($urandom);
      for (int l = 0; l < LANES; l++) begin
        wdata[l] = LW'($urandom);
        if (we[l]) model[waddr][l] = wdata[l];
      end
      @(negedge clk); we = '0; re = 1; raddr = 4'($urandom);
      @(negedge clk); re = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rdata[l] != model[raddr][l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
