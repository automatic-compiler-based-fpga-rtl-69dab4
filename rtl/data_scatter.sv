// data_scatter: converts the DRAM word order of a descriptor into on-chip
// buffer addresses.
//
//   input buffer  : DRAM order (map, row, column) of nix x nix tiles;
//   weight buffer : DRAM already holds the circulant image, word e goes to
//                   column e mod POF, address e / POF;
//   local grads   : DRAM order (map, row, column) of nk x nk tiles, map = lane,
//                   address row*POX + column;
//   WU buffers    : word e to address e.
// Counters restart on the first word of every descriptor. One word per cycle,
// no back-pressure. Which buffers are filled follows the paper's dataflow; the
// DRAM layouts are this design's choice.
module data_scatter
  import train_pkg::*;
#(
  parameter int unsigned POX  = 8,
  parameter int unsigned POF  = 16,
  parameter int unsigned NCH  = 64,
  parameter int unsigned TI   = 10,
  parameter int unsigned WDEPTH = 4096,   // transposable buffer words per column
  parameter int unsigned LDEPTH = 64,     // local-gradient words per lane
  parameter int unsigned UDEPTH = 4096,   // weight-update buffer words
  localparam int unsigned CW  = $clog2(NCH),
  localparam int unsigned TW  = $clog2(TI),
  localparam int unsigned PW  = (POF > 1) ? $clog2(POF) : 1,
  localparam int unsigned WAW = $clog2(WDEPTH),
  localparam int unsigned LAW = $clog2(LDEPTH),
  localparam int unsigned UAW = $clog2(UDEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [4:0]     nix,
  input  logic [3:0]     nk,
  input  logic           valid,
  input  logic           first,
  input  dst_e           dst,
  input  data_t          data,
  // input buffer
  output logic           ib_we,
  output logic [CW-1:0]  ib_ch,
  output logic [TW-1:0]  ib_y, ib_x,
  // transposable weight buffer
  output logic           tw_we,
  output logic [PW-1:0]  tw_col,
  output logic [WAW-1:0] tw_addr,
  // local-gradient buffer
  output logic [POF-1:0] lg_we,
  output logic [LAW-1:0] lg_addr,
  // weight-update buffers: 0 old weights, 1 moment, 2 old grad, 3 current grad
  output logic [3:0]     wu_we,
  output logic [UAW-1:0] wu_addr,
  output data_t          wdata
);
  logic [15:0] e, e_n;
  logic [7:0]  ch, ch_n;
  logic [4:0]  y, x, y_n, x_n;
  logic [4:0]  lim;

  always_comb begin
    e_n = first ? '0 : e;
    ch_n = first ? '0 : ch;
    y_n  = first ? '0 : y;
    x_n  = first ? '0 : x;
    lim  = (dst == DST_LGRAD) ? 5'(nk) : nix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e <= '0; ch <= '0; y <= '0; x <= '0;
    end else if (valid) begin
      e <= e_n + 16'd1;
      if (x_n + 5'd1 == lim) begin
        x <= '0;
        if (y_n + 5'd1 == lim) begin y <= '0; ch <= ch_n + 8'd1; end
        else begin y <= y_n + 5'd1; ch <= ch_n; end
      end else begin
        x <= x_n + 5'd1; y <= y_n; ch <= ch_n;
      end
    end
  end

  always_comb begin
    wdata   = data;
    ib_we   = valid && dst == DST_INPUT;
    ib_ch   = CW'(ch_n);
    ib_y    = TW'(y_n);
    ib_x    = TW'(x_n);
    tw_we   = valid && dst == DST_WEIGHT;
    tw_col  = PW'(e_n);
    tw_addr = WAW'(e_n >> PW);
    lg_we   = '0;
    if (valid && dst == DST_LGRAD && ch_n < 8'(POF)) lg_we[PW'(ch_n)] = 1'b1;
    lg_addr = LAW'(int'(y_n) * POX + int'(x_n));
    wu_we   = '0;
    if (valid) begin
      unique case (dst)
        DST_OLDW: wu_we[0] = 1'b1;
        DST_MOMG: wu_we[1] = 1'b1;
        DST_OLDG: wu_we[2] = 1'b1;
        DST_CURG: wu_we[3] = 1'b1;
        default: ;
      endcase
    end
    wu_addr = UAW'(e_n);
  end
endmodule
