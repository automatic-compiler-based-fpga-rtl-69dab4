// tb_train_pkg: checks the shared rounding/saturation helper sat_shift.
module tb_train_pkg;
  import train_pkg::*;
  int checks = 0, failures = 0;
  function automatic longint ref_fn(longint a, int sh);
    longint r = (sh == 0) ? a : ((a + (longint'(1) << (sh-1))) >>> sh);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction
  initial begin
    for (int i = 0; i < 2000; i++) begin
      automatic longint a = (longint'($urandom) << 4) - (longint'(1) << 35);
      automatic int sh = $urandom_range(20);
      automatic data_t got = sat_shift(acc_t'(a), 6'(sh));
      checks++;
      if (longint'(got) != ref_fn(a, sh)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d sh=%0d got %0d", a, sh, got);
      end
    end
    checks++; if (sat_shift(acc_t'(100000), 6'd0) != 16'sh7fff) failures++;
    checks++; if (sat_shift(-acc_t'(100000), 6'd0) != 16'sh8000) failures++;
    checks++; if (sat_shift(acc_t'(3), 6'd1) != 16'sd2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
