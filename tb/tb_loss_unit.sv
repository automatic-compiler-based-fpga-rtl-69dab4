// tb_loss_unit: Euclidean and square-hinge gradients against formulas.
module tb_loss_unit;
  import train_pkg::*;
  loss_e kind;
  logic [3:0] frac;
  data_t a, y, grad;
  int checks = 0, failures = 0;
  loss_unit dut (.*);
  function automatic int sat(int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction
  initial begin
    for (int t = 0; t < 1000; t++) begin
      int e, one, m;
      kind = t[0] ? LOSS_SQHINGE : LOSS_EUCLID;
      frac = 4'($urandom_range(12));
      one = 1 << frac;
      a = data_t'($urandom);
      if (kind == LOSS_EUCLID) y = data_t'($urandom);
      else y = $urandom_range(1) ? data_t'(one) : data_t'(-one);
      #1;
      if (kind == LOSS_EUCLID) e = sat(int'(a) - int'(y));
      else begin
        m = (y > 0) ? one - int'(a) : one + int'(a);
        e = (m <= 0) ? 0 : sat((y > 0) ? -2*m : 2*m);
      end
      checks++;
      if (int'(grad) != e) begin failures++; if (failures < 10) $display("FAIL k%0d a%0d y%0d g%0d e%0d", kind, a, y, grad, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
