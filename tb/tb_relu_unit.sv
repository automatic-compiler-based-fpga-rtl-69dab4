// tb_relu_unit: rounding shift, saturation, ReLU with activation gradient,
// and AG scaling, against an independent model.
module tb_relu_unit;
  import train_pkg::*;
  localparam int N = 8;
  logic [1:0] mode;
  logic [5:0] shift;
  acc_t acc [N];
  logic [N-1:0] ag_in, ag_out;
  data_t dout [N];
  int checks = 0, failures = 0;
  relu_unit #(.N(N)) dut (.*);
  function automatic int refv(longint a, int sh);
    longint r = (sh == 0) ? a : ((a + (longint'(1) << (sh-1))) >>> sh);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction
  initial begin
    for (int t = 0; t < 500; t++) begin
      mode = 2'($urandom_range(2)); shift = 6'($urandom_range(12));
      ag_in = N'($urandom);
      for (int i = 0; i < N; i++) acc[i] = acc_t'(longint'($urandom_range(2000000)) - 1000000);
      #1;
      for (int i = 0; i < N; i++) begin
        automatic int v = refv(longint'(acc[i]), int'(shift));
        automatic int e = (mode == 1) ? ((v > 0) ? v : 0) : (mode == 2) ? (ag_in[i] ? v : 0) : v;
        checks += 2;
        if (int'(dout[i]) != e) failures++;
        if (ag_out[i] != (v > 0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
