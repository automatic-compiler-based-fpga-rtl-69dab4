// upsampling_unit: backward pass of K x K max pooling for one tile.
//
// Each processing element takes one pooled gradient g(oy,ox) and its stored
// pooling index, demultiplexes g to the window position the index selects and
// writes zero to the other K*K-1 positions, then scales each of the K*K
// outputs by the forward activation gradient at that position (binary for
// ReLU, so the "multiplier" keeps or zeroes). Output pixel (K*oy+dy, K*ox+dx)
// of the POX x POY output tile comes from PE (oy,ox) with index dy*K+dx.
// Inputs are tile vectors indexed y*POX+x; the pooled input tile uses the
// upper-left (POX/K) x (POY/K) corner. One-cycle registered output.
// The demux-and-multiply element follows the paper; the tile layout is own.
module upsampling_unit
  import train_pkg::*;
#(
  parameter int unsigned POX = 8,
  parameter int unsigned POY = 8,
  parameter int unsigned K   = 2,
  localparam int unsigned NPIX = POX*POY,
  localparam int unsigned IW = (K*K > 1) ? $clog2(K*K) : 1
) (
  input  logic            clk,
  input  logic            en,
  input  logic            scale_en,        // 1: scale by activation gradient
  input  data_t           grad [NPIX],
  input  logic [IW-1:0]   idx  [NPIX],
  input  logic [NPIX-1:0] ag,
  output data_t           dout [NPIX]
);
  data_t up [NPIX];
  always_comb begin
    for (int i = 0; i < NPIX; i++) up[i] = '0;
    for (int oy = 0; oy < POY/K; oy++) begin
      for (int ox = 0; ox < POX/K; ox++) begin
        for (int d = 0; d < K*K; d++) begin
          int o;
          o = (K*oy + d/K)*POX + K*ox + d%K;
          if (idx[oy*POX+ox] == IW'(d))
            up[o] = (scale_en && !ag[o]) ? data_t'(0) : grad[oy*POX+ox];
        end
      end
    end
  end
  always_ff @(posedge clk) if (en) dout <= up;
endmodule
