// data_router: feeds input-buffer pixels to the MAC columns (and to the
// pooling and upsampling units, which sit on the same columns).
//
// For each column p = oy*POX + ox and the current step (map c, kernel
// position ky,kx) it forms the input-buffer read address and registers the
// returned pixel:
//   normal mode (FP/BP conv, FC, pooling, upsampling, loss):
//     map c, row oy*stride + ky - pad, column ox*stride + kx - pad;
//     positions outside the nix x nix tile read as zero (padding);
//     the column is used when ox, oy < nox.
//   WU mode: the MAC load balancer splits the columns into groups; group g
//     reads map c*ngroups + g at (ly + ky - pad, lx + kx - pad), where (lx,ly)
//     is the column's kernel-gradient position and (ky,kx) runs over the
//     local-gradient tile, which here plays the role of a large kernel.
// Outputs are registered: pix/pix_ok belong to the step presented one cycle
// earlier. Pad, stride and kernel handling follow the paper; the exact tile
// geometry is this design's choice.
module data_router
  import train_pkg::*;
#(
  parameter int unsigned POX  = 8,
  parameter int unsigned POY  = 8,
  parameter int unsigned NCH  = 64,
  parameter int unsigned TI   = 10,
  parameter int unsigned MAXG = 4,
  localparam int unsigned NPIX = POX*POY,
  localparam int unsigned CW   = $clog2(NCH),
  localparam int unsigned TW   = $clog2(TI),
  localparam int unsigned GW   = (MAXG > 1) ? $clog2(MAXG) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,          // a step is presented this cycle
  input  logic          wu_mode,
  input  logic          lb_en,       // load balancing on (WU)
  input  logic [15:0]   c,           // map (normal) or map group (WU)
  input  logic [3:0]    ky, kx,
  input  logic [1:0]    stride, pad,
  input  logic [4:0]    nix,
  input  logic [3:0]    nox,         // output tile edge; WU: kernel-gradient edge
  input  logic [7:0]    nch,         // maps present (WU: ignore groups beyond)
  output logic [GW:0]   ngroups,
  // input buffer read ports
  output logic [CW-1:0] r_ch [NPIX],
  output logic [TW-1:0] r_y  [NPIX],
  output logic [TW-1:0] r_x  [NPIX],
  input  data_t         rdata [NPIX],
  // to the MAC array / pooling / upsampling
  output data_t         pix    [NPIX],
  output logic          pix_ok [NPIX]
);
  logic [GW-1:0] grp [NPIX];
  logic [3:0]    lx [NPIX], ly [NPIX];
  logic          lok [NPIX];
  logic          in_tile [NPIX];
  logic          use_col [NPIX];

  mac_load_balancer #(.POX(POX), .POY(POY), .MAXG(MAXG)) u_lb (
    .en(wu_mode & lb_en), .kw(nox), .ngroups, .grp, .lx, .ly, .ok(lok)
  );

  always_comb begin
    for (int p = 0; p < NPIX; p++) begin
      int ox, oy, iy, ix, ch;
      ox = p % POX;
      oy = p / POX;
      if (wu_mode) begin
        ch = int'(c) * int'(ngroups) + int'(grp[p]);
        iy = int'(ly[p]) + int'(ky) - int'(pad);
        ix = int'(lx[p]) + int'(kx) - int'(pad);
        use_col[p] = lok[p] && (ch < int'(nch));
      end else begin
        ch = int'(c);
        iy = oy * int'(stride) + int'(ky) - int'(pad);
        ix = ox * int'(stride) + int'(kx) - int'(pad);
        use_col[p] = (ox < int'(nox)) && (oy < int'(nox));
      end
      in_tile[p] = (iy >= 0) && (ix >= 0) && (iy < int'(nix)) && (ix < int'(nix));
      r_ch[p] = (ch < NCH) ? CW'(ch) : '0;
      r_y[p]  = in_tile[p] ? TW'(iy) : '0;
      r_x[p]  = in_tile[p] ? TW'(ix) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPIX; p++) begin pix[p] <= '0; pix_ok[p] <= 1'b0; end
    end else if (en) begin
      for (int p = 0; p < NPIX; p++) begin
        pix[p]    <= in_tile[p] ? rdata[p] : '0;
        pix_ok[p] <= use_col[p];
      end
    end
  end
endmodule
