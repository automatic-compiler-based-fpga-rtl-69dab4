// weight_update_unit: weight-gradient accumulation and SGD-with-momentum update
// for one weight per cycle.
//
// Every training image: g_acc = g_old + g_cur (g_old is forced to zero for the
// first image of a batch). At the end of the batch (batch_done) the new weight
//   w_new = w_old + beta * m - alpha * g_acc
// is also formed, where m is the gradient accumulated over the previous batch.
// This is the paper's update rule w(n) = beta*dw(n-1) - alpha*dw(n) + w(n-1)
// taken as printed. alpha and beta are unsigned Q0.16; averaging over the
// batch is folded into alpha. Products are rounded and results saturate.
// One pipeline stage: outputs are valid the cycle after `en`.
module weight_update_unit
  import train_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        first_img,
  input  logic        batch_done,
  input  logic [15:0] alpha,
  input  logic [15:0] beta,
  input  data_t       w_old,
  input  data_t       m_old,
  input  data_t       g_old,
  input  data_t       g_cur,
  output logic        vld,
  output data_t       g_acc,
  output data_t       w_new
);
  acc_t gsum, bm, ag, wn;
  data_t gs;
  always_comb begin
    gsum = (first_img ? acc_t'(0) : acc_t'(g_old)) + acc_t'(g_cur);
    gs   = sat_shift(gsum, 6'd0);
    bm   = (acc_t'(m_old) * acc_t'({1'b0, beta})  + (acc_t'(1) <<< 15)) >>> 16;
    ag   = (acc_t'(gs)    * acc_t'({1'b0, alpha}) + (acc_t'(1) <<< 15)) >>> 16;
    wn   = acc_t'(w_old) + bm - ag;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= 1'b0; g_acc <= '0; w_new <= '0;
    end else begin
      vld <= en;
      if (en) begin
        g_acc <= gs;
        w_new <= batch_done ? sat_shift(wn, 6'd0) : w_old;
      end
    end
  end
endmodule
