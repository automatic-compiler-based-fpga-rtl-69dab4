// mac_load_balancer: maps MAC columns onto parallel kernel-gradient groups.
//
// In WU the outputs are kernels (e.g. 3x3), so a Pox x Poy column plane would
// leave most MACs idle. The balancer tiles the plane with kw x kw groups:
// group (gx, gy) covers columns ox in [gx*kw, gx*kw+kw) and oy likewise, up to
// MAXG groups (4 in the paper's example: 8x8 plane, 3x3 kernels). Each group
// works on a different input map, so MAXG kernel gradients are computed at
// once (4x fewer cycles, no extra MACs). For every column it gives the group,
// the position inside the kernel and whether the column is used. With `en`
// low there is a single group covering columns ox, oy < kw. Combinational.
// The grouping follows the paper's load-balancing figure; the row-major group
// numbering is this design's choice.
module mac_load_balancer #(
  parameter int unsigned POX  = 8,
  parameter int unsigned POY  = 8,
  parameter int unsigned MAXG = 4,
  localparam int unsigned NPIX = POX*POY,
  localparam int unsigned GW   = (MAXG > 1) ? $clog2(MAXG) : 1
) (
  input  logic          en,
  input  logic [3:0]    kw,             // kernel-gradient size (1..POX)
  output logic [GW:0]   ngroups,        // groups in use (1..MAXG)
  output logic [GW-1:0] grp [NPIX],
  output logic [3:0]    lx  [NPIX],
  output logic [3:0]    ly  [NPIX],
  output logic          ok  [NPIX]
);
  always_comb begin
    int gpr, gpc, ng;
    gpr = (kw == 0) ? 1 : POX / int'(kw);
    gpc = (kw == 0) ? 1 : POY / int'(kw);
    ng  = en ? gpr * gpc : 1;
    if (ng > MAXG) ng = MAXG;
    if (ng < 1)    ng = 1;
    ngroups = (GW+1)'(ng);
    for (int p = 0; p < NPIX; p++) begin
      int ox, oy, gx, gy, g;
      ox = p % POX;
      oy = p / POX;
      gx = (kw == 0) ? 0 : ox / int'(kw);
      gy = (kw == 0) ? 0 : oy / int'(kw);
      g  = gy * gpr + gx;
      lx[p] = 4'(ox - gx * int'(kw));
      ly[p] = 4'(oy - gy * int'(kw));
      if (en) begin
        grp[p] = GW'(g);
        ok[p]  = (gx < gpr) && (gy < gpc) && (g < ng);
      end else begin
        grp[p] = '0;
        lx[p]  = 4'(ox);
        ly[p]  = 4'(oy);
        ok[p]  = (ox < int'(kw)) && (oy < int'(kw));
      end
    end
  end
endmodule
