// address_translator: address and rotation logic of the transposable weight
// buffer.
//
// Kernels are kept as a circulant matrix over POF single-port column buffers.
// Kernel block (row r, output map j) -- row r is an input map in FP -- lives
// in column (j + r) mod POF at word r*KMAX*KMAX + ky*KMAX + kx, so every row
// of blocks is rotated right by r mod POF (figure: column C0 holds 101, 204,
// 303, 402).
//   Normal (FP) read of row r: every column gets the same address; the data
//   vector must be rotated left by r mod POF to put output map j in lane j.
//   Transpose (BP) read of output map j within the POF x POF square starting
//   at row `row` (a multiple of POF): column c reads row row + ((c - j) mod
//   POF), so the addresses differ per column (figure's table: 0,1,2,3 for
//   j = 0), and the data is rotated left by j to put input map i in lane i.
//   The kernel is also rotated by 180 degrees: (ky,kx) -> (nk-1-ky, nk-1-kx).
// The write side maps (row, j, ky, kx) to (column, word) for the gradient
// gather, so kernel gradients land in DRAM in the same layout as weights.
// Purely combinational. The circulant scheme and the shared-address FP read
// follow the paper; the word layout inside a column is this design's choice.
module address_translator
  import train_pkg::*;
#(
  parameter int unsigned POF  = 16,
  parameter int unsigned ROWS = 256,  // kernel-block rows held
  parameter int unsigned KMAX = 4,    // largest kernel edge (4 covers the FC layer)
  localparam int unsigned DEPTH = ROWS*KMAX*KMAX,
  localparam int unsigned ADW   = $clog2(DEPTH),
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned PW    = (POF > 1) ? $clog2(POF) : 1
) (
  // read side
  input  logic           transpose,   // 0: FP normal read, 1: BP transpose read
  input  logic [RW-1:0]  row,         // FP: block row; BP: first row of the square
  input  logic [PW-1:0]  j,           // BP: output map within the square
  input  logic [3:0]     ky, kx, nk,
  output logic [ADW-1:0] raddr [POF],
  output logic [PW-1:0]  rot,         // left rotation for the read data
  // write side
  input  logic [RW-1:0]  w_row,
  input  logic [PW-1:0]  w_j,
  input  logic [3:0]     w_ky, w_kx,
  output logic [PW-1:0]  w_col,
  output logic [ADW-1:0] w_addr
);
  localparam int unsigned KK = KMAX*KMAX;

  logic [3:0] eky, ekx;
  always_comb begin
    eky = transpose ? 4'(nk - 4'd1 - ky) : ky;
    ekx = transpose ? 4'(nk - 4'd1 - kx) : kx;
    for (int c = 0; c < POF; c++) begin
      logic [RW-1:0] r;
      if (transpose) r = RW'(row) + RW'(PW'(PW'(c) - j));
      else           r = row;
      raddr[c] = ADW'(r) * ADW'(KK) + ADW'(eky) * ADW'(KMAX) + ADW'(ekx);
    end
    rot = transpose ? j : PW'(row);
  end

  always_comb begin
    w_col  = PW'(w_j + PW'(w_row));
    w_addr = ADW'(w_row) * ADW'(KK) + ADW'(w_ky) * ADW'(KMAX) + ADW'(w_kx);
  end
endmodule
