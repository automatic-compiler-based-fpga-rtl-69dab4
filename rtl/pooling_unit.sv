// pooling_unit: one max-pooling comparator.
//
// Receives the pixels of one K x K pooling window, one per cycle, in the
// order the data router sends them (row by row). `first` marks the first pixel
// of a window. The unit keeps the running maximum and the position of the
// maximum within the window (0 .. K*K-1, 2 bits for the paper's 2x2 window);
// ties keep the earlier pixel. `max_q`/`idx_q` are valid the cycle after the
// last pixel. The index is what the upsampling unit later uses to route the
// gradient back. Comparator and index follow the paper; the serial window
// order and the tie rule are own choices.
module pooling_unit
  import train_pkg::*;
#(
  parameter int unsigned K = 2,
  localparam int unsigned IW = (K*K > 1) ? $clog2(K*K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  data_t         pix,
  output data_t         max_q,
  output logic [IW-1:0] idx_q
);
  logic [IW-1:0] pos;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q <= '0; idx_q <= '0; pos <= '0;
    end else if (en) begin
      if (first) begin
        max_q <= pix; idx_q <= '0; pos <= IW'(1);
      end else begin
        if (pix > max_q) begin max_q <= pix; idx_q <= pos; end
        pos <= pos + IW'(1);
      end
    end
  end
endmodule
