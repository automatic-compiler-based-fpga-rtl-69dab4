// train_pkg: types and constants shared by the CNN training engine.
//
// All data (weights, activations, local and weight gradients) is 16-bit
// two's-complement fixed point, as in the paper. Where the binary point sits
// is a per-layer choice: each layer descriptor carries the right shift applied
// when a wide accumulator is brought back to 16 bits. The layer descriptor
// (layer_cfg_t) is what the offline compiler would emit for every scheduled
// layer; its exact fields are this design's own choice.
package train_pkg;

  localparam int unsigned DW   = 16;  // data width (paper: 16-bit fixed point)
  localparam int unsigned ACCW = 40;  // MAC accumulator width (own choice)
  localparam int unsigned AW   = 24;  // DRAM word address width (own choice)

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Training phase of a convolution (table in the MAC-array figure).
  typedef enum logic [1:0] {
    PH_FP = 2'd0,   // activations x normal kernels -> activations
    PH_BP = 2'd1,   // local gradients x flipped kernels -> local gradients
    PH_WU = 2'd2    // activations x local gradients -> kernel gradients
  } phase_e;

  // Key and affiliated layer operations executed by the engine.
  typedef enum logic [2:0] {
    OP_CONV   = 3'd0,  // convolution / fully connected (FP, BP or WU)
    OP_POOL   = 3'd1,  // max pooling, stores indices
    OP_UPSAMP = 3'd2,  // upsampling by pooling index, scaled by AG
    OP_LOSS   = 3'd3,  // loss gradient
    OP_WUPD   = 3'd4   // weight-gradient accumulation / SGD update
  } op_e;

  typedef enum logic {
    LOSS_EUCLID = 1'b0,   // dC/da = a - y
    LOSS_SQHINGE = 1'b1   // dC/da = -2 y max(0, 1 - y a)
  } loss_e;

  // One DMA read descriptor: copy len words from DRAM base to buffer dst.
  typedef enum logic [2:0] {
    DST_INPUT = 3'd0,  // input pixel buffer (activations or local gradients)
    DST_WEIGHT = 3'd1, // transposable weight buffer
    DST_LGRAD = 3'd2,  // local-gradient buffer (WU weights)
    DST_OLDW  = 3'd3,  // old weight buffer (labels for the loss)
    DST_MOMG  = 3'd4,  // moment (past) gradient buffer
    DST_OLDG  = 3'd5,  // old accumulated weight-gradient buffer
    DST_CURG  = 3'd6   // current weight-gradient buffer
  } dst_e;

  typedef struct packed {
    dst_e          dst;
    logic [AW-1:0] base;
    logic [15:0]   len;
  } desc_t;


  // One scheduled layer (one tile of it).
  typedef struct packed {
    op_e          op;
    phase_e       phase;
    logic [7:0]   nch;       // channels in the input buffer used by this op
    logic [7:0]   nof;       // output maps (MAC rows) in use, <= POF
    logic [7:0]   wrow;      // FP: first kernel-block row; BP: first row of the square
    logic [3:0]   nk;        // kernel / window size (square); WU: local-gradient tile size
    logic [1:0]   stride;
    logic [1:0]   pad;
    logic [4:0]   nix;       // input tile width  (= height)
    logic [3:0]   nox;       // output tile width (= height), <= POX
    logic [5:0]   blk;       // BP: which block of Pof input maps is computed
    logic [5:0]   shift;     // accumulator right shift to 16 bits
    logic         relu;      // FP: apply ReLU and store activation gradients
    logic         lb;        // WU: use the MAC load balancer
    logic [7:0]   ag_base;   // AG/IDX buffer region of this layer
    loss_e        loss;
    logic         first_img; // WUPD: first image of the batch (no old gradient)
    logic         batch_done;// WUPD: last image of the batch -> compute new weights
    logic [15:0]  alpha;     // learning rate, unsigned Q0.16
    logic [15:0]  beta;      // momentum coefficient, unsigned Q0.16
    logic [15:0]  nelem;     // WUPD / LOSS element count
    logic [AW-1:0] in_base;  // DRAM base of input pixels / gradients
    logic [AW-1:0] w_base;   // DRAM base of weights / local gradients / old weights
    logic [AW-1:0] aux_base; // DRAM base of labels / moment grads / old grads
    logic [AW-1:0] aux2_base;// DRAM base of current weight gradients
    logic [AW-1:0] out_base; // DRAM base of results
    logic [AW-1:0] out2_base;// DRAM base of the accumulated gradient (WUPD)
  } layer_cfg_t;

  // Round-half-up arithmetic shift and saturation to 16 bits.
  function automatic data_t sat_shift(input acc_t a, input logic [5:0] sh);
    acc_t r;
    if (sh == 0) r = a;
    else         r = (a + (acc_t'(1) <<< (sh - 1))) >>> sh;
    if (r > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (r < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(r[DW-1:0]);
  endfunction

endpackage
