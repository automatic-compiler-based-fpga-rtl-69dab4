// mac_array: the Pox x Poy x Pof MAC array of the training engine.
//
// MAC (of, pix) sits in row `of` and column `pix` (pix = oy*POX + ox). Every
// MAC of a row gets the same weight (wt[of]); every MAC of a column gets the
// same input pixel (pix[pix]). In FP the rows compute Pof output maps, in BP
// Pof local-gradient maps, in WU Pof kernel gradients; only what is fed
// changes. Weight and pixel are broadcast within the array in this version
// (the paper calls the array systolic but gives no register placement), so
// all MACs accumulate in the same cycle. Latency: one cycle from en/clr to acc.
// Array sizes default to the paper's 1X design: 8 x 8 x 16 = 1,024 MACs.
module mac_array
  import train_pkg::*;
#(
  parameter int unsigned POX = 8,
  parameter int unsigned POY = 8,
  parameter int unsigned POF = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  data_t pix [POX*POY],   // one pixel per column
  input  logic  pix_ok [POX*POY],// column enable (load balancer / tile edge)
  input  data_t wt  [POF],       // one weight per row
  output acc_t  acc [POF][POX*POY]
);
  for (genvar f = 0; f < POF; f++) begin : g_row
    for (genvar p = 0; p < POX*POY; p++) begin : g_col
      mac_unit u_mac (
        .clk, .rst_n,
        .en (en & pix_ok[p]),
        .clr(clr),
        .pix(pix[p]),
        .wt (wt[f]),
        .acc(acc[f][p])
      );
    end
  end
endmodule
