// relu_unit: output stage of the MAC array for one vector of results.
//
// Brings each 40-bit accumulator back to 16 bits (rounding right shift by
// `shift`, then saturation) and then, by mode:
//   RELU_NONE : passes the value (WU kernel gradients, FC outputs).
//   RELU_FP   : applies ReLU and reports the activation gradient, which for
//               ReLU is one bit per pixel (1 where the input was positive).
//   RELU_SCALE: multiplies by a stored activation gradient (BP scaling); as
//               the gradient is binary this keeps or zeroes the value.
// Combinational. ReLU as the only activation, the binary activation gradient
// and scaling in BP follow the paper; rounding and saturation are own choices.
module relu_unit
  import train_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic [1:0]  mode,      // 0 none, 1 ReLU (FP), 2 scale by AG (BP)
  input  logic [5:0]  shift,
  input  acc_t        acc [N],
  input  logic [N-1:0] ag_in,
  output data_t       dout [N],
  output logic [N-1:0] ag_out
);
  localparam logic [1:0] RELU_NONE = 2'd0, RELU_FP = 2'd1, RELU_SCALE = 2'd2;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      data_t v;
      v = sat_shift(acc[i], shift);
      ag_out[i] = (v > 0);
      unique case (mode)
        RELU_FP:    dout[i] = (v > 0) ? v : '0;
        RELU_SCALE: dout[i] = ag_in[i] ? v : '0;
        default:    dout[i] = v;
      endcase
    end
  end
endmodule
