// transposable_weight_buffer: kernel store readable in normal (FP) and
// transpose (BP) order without keeping a second copy.
//
// POF single-port column buffers hold the kernels as a circulant matrix (see
// address_translator). A write stores one 16-bit word into one column; DRAM
// keeps the weights in the same circulant image, word e at column e mod POF,
// address e / POF, so loading is a straight copy. A read presents, one cycle
// later, POF kernel values in logical lane order: FP lane j = output map j of
// input row `row`; BP lane i = input map i of the square for output map j,
// with the kernel rotated by 180 degrees. A write has priority over a read in
// the same cycle (single-port columns). The rotation of the read vector is a
// barrel rotator here, where the paper uses shift registers.
module transposable_weight_buffer
  import train_pkg::*;
#(
  parameter int unsigned POF  = 16,
  parameter int unsigned ROWS = 256,
  parameter int unsigned KMAX = 4,
  localparam int unsigned DEPTH = ROWS*KMAX*KMAX,
  localparam int unsigned ADW   = $clog2(DEPTH),
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned PW    = (POF > 1) ? $clog2(POF) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // write (from the data scatter)
  input  logic           we,
  input  logic [PW-1:0]  wcol,
  input  logic [ADW-1:0] waddr,
  input  data_t          wdata,
  // read
  input  logic           re,
  input  logic           transpose,
  input  logic [RW-1:0]  row,
  input  logic [PW-1:0]  j,
  input  logic [3:0]     ky, kx, nk,
  output data_t          rdata [POF]
);
  logic [ADW-1:0] raddr [POF];
  logic [PW-1:0]  rot, rot_q;
  logic [PW-1:0]  unused_col;
  logic [ADW-1:0] unused_addr;
  data_t          col_q [POF];

  address_translator #(.POF(POF), .ROWS(ROWS), .KMAX(KMAX)) u_at (
    .transpose, .row, .j, .ky, .kx, .nk, .raddr, .rot,
    .w_row('0), .w_j('0), .w_ky('0), .w_kx('0), .w_col(unused_col), .w_addr(unused_addr)
  );

  for (genvar c = 0; c < POF; c++) begin : g_col
    data_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wcol == PW'(c)) mem[waddr] <= wdata;
      else if (re)              col_q[c] <= mem[raddr[c]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rot_q <= '0;
    else if (re && !we) rot_q <= rot;
  end

  always_comb begin
    for (int i = 0; i < POF; i++) rdata[i] = col_q[PW'(PW'(i) + rot_q)];
  end
endmodule
