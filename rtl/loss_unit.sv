// loss_unit: gradient of the loss with respect to one network output.
//
//   Euclidean   : C = 1/2 (a - y)^2            dC/da = a - y
//   Square hinge: C = max(0, 1 - y a)^2        dC/da = -2 y max(0, 1 - y a)
// a and y are 16-bit fixed point with `frac` fractional bits; for the hinge
// loss y is +1 or -1 (any y > 0 counts as +1). Results saturate to 16 bits.
// Combinational. The two loss types are the ones the paper supports; the
// label encoding is this design's choice.
module loss_unit
  import train_pkg::*;
(
  input  loss_e      kind,
  input  logic [3:0] frac,
  input  data_t      a,
  input  data_t      y,
  output data_t      grad
);
  acc_t one, m, g;
  always_comb begin
    one = acc_t'(1) <<< frac;
    m   = '0;
    if (kind == LOSS_EUCLID) begin
      g = acc_t'(a) - acc_t'(y);
    end else begin
      m = (y > 0) ? one - acc_t'(a) : one + acc_t'(a);
      if (m <= 0)     g = '0;
      else if (y > 0) g = -(m <<< 1);
      else            g = m <<< 1;
    end
    grad = sat_shift(g, 6'd0);
  end
endmodule
