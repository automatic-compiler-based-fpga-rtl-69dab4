// mac_unit: one multiply-accumulate cell of the MAC array.
//
// Multiplies a 16-bit pixel by a 16-bit weight (both signed fixed point) and
// adds the product into a 40-bit accumulator. `clr` starts a new sum with the
// current product (or zero when `en` is low), `en` accumulates. One cycle
// latency: the accumulator shows the sum of all products given up to the
// previous edge. The cell follows the paper's MAC array; the accumulator width
// and the clear/enable handshake are this design's choice.
module mac_unit
  import train_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,     // accumulate pix*wt this cycle
  input  logic  clr,    // restart the sum
  input  data_t pix,
  input  data_t wt,
  output acc_t  acc
);
  acc_t prod;
  assign prod = acc_t'(pix) * acc_t'(wt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (clr)     acc <= en ? prod : '0;
    else if (en)      acc <= acc + prod;
  end
endmodule
