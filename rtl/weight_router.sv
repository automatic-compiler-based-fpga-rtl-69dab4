// weight_router: chooses what the MAC rows multiply with.
//
//   FP : normal kernels from the transposable buffer (lane = output map);
//   BP : flipped, transposed kernels from the same buffer (lane = input map);
//   WU : local gradients (lane = output map), the "kernel" of the
//        weight-gradient convolution.
// Rows at or above `nrows` (maps not present in this layer) get weight zero,
// so their MACs add nothing. Combinational; the buffers already register.
// The phase-dependent selection follows the paper's MAC-array figure.
module weight_router
  import train_pkg::*;
#(
  parameter int unsigned POF = 16
) (
  input  phase_e     phase,
  input  logic [7:0] nrows,
  input  data_t      twb [POF],
  input  data_t      lgrad [POF],
  output data_t      wt [POF]
);
  always_comb begin
    for (int f = 0; f < POF; f++) begin
      if (f >= int'(nrows))      wt[f] = '0;
      else if (phase == PH_WU)   wt[f] = lgrad[f];
      else                       wt[f] = twb[f];
    end
  end
endmodule
