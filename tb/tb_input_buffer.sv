// tb_input_buffer: fills maps through the write port, reads them back through
// all read ports at random positions.
module tb_input_buffer;
  import train_pkg::*;
  localparam int NCH = 8, TI = 5, NRD = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [2:0] w_ch, r_ch [NRD];
  logic [2:0] w_y, w_x, r_y [NRD], r_x [NRD];
  data_t wdata, rdata [NRD];
  int model [NCH][TI][TI];
  int checks = 0, failures = 0;
  input_buffer #(.NCH(NCH), .TI(TI), .NRD(NRD)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0;
    for (int c = 0; c < NCH; c++) for (int y = 0; y < TI; y++) for (int x = 0; x < TI; x++) begin
      @(negedge clk);
      we = 1; w_ch = 3'(c); w_y = 3'(y); w_x = 3'(x); wdata = data_t'($urandom);
      model[c][y][x] = int'(wdata);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      for (int p = 0; p < NRD; p++) begin
        r_ch[p] = 3'($urandom_range(NCH-1)); r_y[p] = 3'($urandom_range(TI-1)); r_x[p] = 3'($urandom_range(TI-1));
      end
      #1;
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (int'(rdata[p]) != model[r_ch[p]][r_y[p]][r_x[p]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
