// lane_ram: on-chip buffer made of LANES parallel lanes sharing one address.
//
// Each word holds LANES lanes of LW bits. A write stores the lanes selected by
// `we` at `waddr`; a read returns all lanes of `raddr` one cycle later. One
// write and one read port (simple dual-port block RAM). The engine uses it for
// the output buffer (lane = output map, LW = one tile of pixels), the
// activation-gradient and pooling-index buffers (LW = one bit / two bits per
// pixel), the local-gradient buffer and the weight-update buffers. The paper
// names these buffers; their organisation is this design's choice.
module lane_ram #(
  parameter int unsigned LANES = 16,
  parameter int unsigned LW    = 16,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned ADW  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [LANES-1:0] we,
  input  logic [ADW-1:0]   waddr,
  input  logic [LW-1:0]    wdata [LANES],
  input  logic             re,
  input  logic [ADW-1:0]   raddr,
  output logic [LW-1:0]    rdata [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [LW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[l]) mem[waddr] <= wdata[l];
      if (re)    rdata[l] <= mem[raddr];
    end
  end
endmodule
