// dma_manager: turns a layer descriptor into the DMA read descriptors that
// fill the on-chip buffers before the layer runs.
//
// Per operation (len in 16-bit words):
//   CONV FP/BP : input maps (nch*nix*nix) to the input buffer, then, when
//                nelem != 0, nelem circulant weight words to the transposable
//                buffer (nelem = 0 keeps the weights already on chip);
//   CONV WU    : activations to the input buffer, nof*nk*nk local gradients;
//   POOL/UPSAMP: input maps (upsampling's indices and activation gradients
//                are already on chip);
//   LOSS       : nch outputs, nch labels;
//   WUPD       : current gradients, old accumulated gradients (not for the
//                first image), and at the end of a batch old weights and the
//                previous batch's gradients.
// Descriptors leave one at a time on a valid/ready handshake; `done` pulses
// after the last one is accepted. The descriptor lists are this design's
// choice; the paper says only that descriptors follow layer type and tile size.
module dma_manager
  import train_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       desc_valid,
  output desc_t      desc,
  input  logic       desc_ready,
  output logic       done
);
  desc_t      list [4];
  logic [2:0] n;
  logic [2:0] idx;
  logic       busy;
  logic [15:0] npix;

  always_comb begin
    npix = 16'(cfg.nch) * 16'(cfg.nix) * 16'(cfg.nix);
    n = '0;
    for (int i = 0; i < 4; i++) list[i] = '0;
    unique case (cfg.op)
      OP_CONV: begin
        list[0] = '{DST_INPUT, cfg.in_base, npix};
        if (cfg.phase == PH_WU) begin
          list[1] = '{DST_LGRAD, cfg.w_base, 16'(cfg.nof) * 16'(cfg.nk) * 16'(cfg.nk)};
          n = 3'd2;
        end else if (cfg.nelem != 0) begin
          list[1] = '{DST_WEIGHT, cfg.w_base, cfg.nelem};
          n = 3'd2;
        end else n = 3'd1;
      end
      OP_POOL, OP_UPSAMP: begin
        list[0] = '{DST_INPUT, cfg.in_base, npix};
        n = 3'd1;
      end
      OP_LOSS: begin
        list[0] = '{DST_INPUT, cfg.in_base, 16'(cfg.nch)};
        list[1] = '{DST_OLDW,  cfg.aux_base, 16'(cfg.nch)};
        n = 3'd2;
      end
      OP_WUPD: begin
        list[0] = '{DST_CURG, cfg.aux2_base, cfg.nelem};
        n = 3'd1;
        if (!cfg.first_img) begin list[n[1:0]] = '{DST_OLDG, cfg.in_base, cfg.nelem}; n = n + 3'd1; end
        if (cfg.batch_done) begin
          list[n[1:0]] = '{DST_OLDW, cfg.w_base, cfg.nelem};   n = n + 3'd1;
          list[n[1:0]] = '{DST_MOMG, cfg.aux_base, cfg.nelem}; n = n + 3'd1;
        end
      end
      default: n = '0;
    endcase
  end

  assign desc_valid = busy;
  assign desc       = list[idx[1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        idx  <= '0;
        busy <= (n != 0);
        done <= (n == 0);
      end else if (busy && desc_ready) begin
        if (idx + 3'd1 == n) begin busy <= 1'b0; done <= 1'b1; end
        idx <= idx + 3'd1;
      end
    end
  end
endmodule
