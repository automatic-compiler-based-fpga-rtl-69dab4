// global_controller: runs one scheduled layer (one tile) at a time.
//
// On `start` it latches the layer descriptor and goes through
//   LOAD    : the DMA manager issues the read descriptors; wait until the
//             DMA has returned every word;
//   COMPUTE : the loop sequencer runs with the op's loop bounds
//               CONV FP/BP : n_outer = nch,             kernel nk, one sum
//               CONV WU    : n_outer = ceil(nch/groups), local-gradient tile
//                            nk, one result per map group
//               POOL       : n_outer = nch, window nk, one result per map
//               UPSAMP/LOSS: n_outer = nch, 1x1
//               WUPD       : n_outer = nelem, 1x1 (one weight per step)
//   DRAIN   : waits for the three-stage datapath to empty;
//   STORE   : the data gather sends the results to DRAM; wait until the
//             last write is taken;
// and pulses `done`. The sequence of layers (the schedule) comes from outside,
// one descriptor per start, as the paper's compiler would emit it. The
// layer-by-layer flow follows the paper; the phase split is this design's.
module global_controller
  import train_pkg::*;
#(
  parameter int unsigned MAXG = 4,
  localparam int unsigned GW = (MAXG > 1) ? $clog2(MAXG) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg_in,
  output layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  input  logic [GW:0] ngroups,
  // DMA manager / engine
  output logic        mgr_start,
  input  logic        mgr_done,
  input  logic        rd_idle,
  input  logic        wr_idle,
  // loop sequencer
  output logic        seq_start,
  output logic [15:0] n_outer,
  output logic [3:0]  nk,
  output logic        sum_all,
  input  logic        seq_done,
  // gather
  output logic        gat_start,
  input  logic        gat_done,
  output logic [2:0]  phase_id      // 0 idle, 1 load, 2 compute, 3 drain, 4 store
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_COMP, S_DRAIN, S_STORE, S_WAITW} state_e;
  state_e st;
  logic [1:0] drain;
  logic       mgr_fin;

  always_comb begin
    n_outer = 16'(cfg.nch);
    nk      = 4'd1;
    sum_all = 1'b0;
    unique case (cfg.op)
      OP_CONV: if (cfg.phase == PH_WU) begin
                 n_outer = (16'(cfg.nch) + 16'(ngroups) - 16'd1) / 16'(ngroups);
                 nk = cfg.nk;
               end else begin
                 nk = cfg.nk; sum_all = 1'b1;
               end
      OP_POOL: nk = cfg.nk;
      OP_WUPD: n_outer = cfg.nelem;
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);
  always_comb begin
    unique case (st)
      S_IDLE:  phase_id = 3'd0;
      S_LOAD:  phase_id = 3'd1;
      S_COMP:  phase_id = 3'd2;
      S_DRAIN: phase_id = 3'd3;
      default: phase_id = 3'd4;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cfg <= '0; done <= 1'b0; mgr_start <= 1'b0; seq_start <= 1'b0;
      gat_start <= 1'b0; mgr_fin <= 1'b0; drain <= '0;
    end else begin
      done <= 1'b0; mgr_start <= 1'b0; seq_start <= 1'b0; gat_start <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          cfg <= cfg_in; st <= S_LOAD; mgr_start <= 1'b1; mgr_fin <= 1'b0;
        end
        S_LOAD: begin
          if (mgr_done) mgr_fin <= 1'b1;
          if ((mgr_fin || mgr_done) && rd_idle && !mgr_start) begin
            st <= S_COMP; seq_start <= 1'b1;
          end
        end
        S_COMP: if (seq_done) begin st <= S_DRAIN; drain <= 2'd3; end
        S_DRAIN: begin
          if (drain == 0) begin st <= S_STORE; gat_start <= 1'b1; end
          else drain <= drain - 2'd1;
        end
        S_STORE: begin
          if (gat_done) st <= S_WAITW;
        end
        S_WAITW: if (wr_idle) begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
