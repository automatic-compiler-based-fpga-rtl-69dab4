// input_buffer: input pixel buffer with one read port per MAC column.
//
// Holds up to NCH input maps (activations in FP/WU, local gradients in BP),
// each one tile of TI x TI pixels, at word c*TI*TI + y*TI + x. One write port
// (data scatter) and NRD combinational read ports (data router),
// register-file style; the router registers the data.
// The paper feeds each load-balanced group from its own input FIFO (IF0, IF4,
// ... for group 0); here one multi-ported memory serves all columns, so every
// group can read any map in the same cycle and the map interleaving of that
// figure is done by the router's addressing (map = step*groups + group).
// Tile size, layout and combinational reads are this design's choices.
module input_buffer
  import train_pkg::*;
#(
  parameter int unsigned NCH   = 64,
  parameter int unsigned TI    = 10,
  parameter int unsigned NRD   = 64,
  localparam int unsigned DEPTH = NCH*TI*TI,
  localparam int unsigned CW    = $clog2(NCH),
  localparam int unsigned TW    = $clog2(TI)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [CW-1:0] w_ch,
  input  logic [TW-1:0] w_y, w_x,
  input  data_t         wdata,
  input  logic [CW-1:0] r_ch [NRD],
  input  logic [TW-1:0] r_y  [NRD],
  input  logic [TW-1:0] r_x  [NRD],
  output data_t         rdata [NRD]
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[int'(w_ch) * TI * TI + int'(w_y) * TI + int'(w_x)] <= wdata;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rdata[p] = mem[int'(r_ch[p]) * TI * TI + int'(r_y[p]) * TI + int'(r_x[p])];
  end
endmodule
