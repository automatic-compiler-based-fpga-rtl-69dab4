// data_gather: reads results from the on-chip buffers in DRAM order and sends
// them to the DMA as (address, word) beats.
//
// A nest of five counters i0..i4 (i4 innermost) walks the results:
//   CONV FP/BP : map f < nof, row < nox, column < nox  -> out_base + running
//   POOL       : map < nch, row, column < nox          -> out_base + running
//   UPSAMP     : map < nch, row, column < 2*nox        -> out_base + running
//   CONV WU    : map group n, group g, output map f, ky, kx < nox; input map
//                i = n*ngroups + g; the gradient of kernel (row wrow+i, map f)
//                goes to the same circulant position its weight has in DRAM
//                (address_translator write side), so the weight update can
//                run word by word;
//   LOSS       : class < nch                           -> out_base + class
//   WUPD       : pass 0 accumulated gradients -> out2_base + e; pass 1, only
//                at the end of a batch, new weights -> out_base + e (the
//                batch-done multiplexer of the weight-update figure).
// Each result takes a read cycle, then is offered with wr_valid until
// wr_ready. `done` pulses after the last beat. The orders are own choices.
module data_gather
  import train_pkg::*;
#(
  parameter int unsigned POX  = 8,
  parameter int unsigned POY  = 8,
  parameter int unsigned POF  = 16,
  parameter int unsigned ODEPTH = 16,
  parameter int unsigned UDEPTH = 4096,
  parameter int unsigned ROWS = 256,
  parameter int unsigned KMAX = 4,
  parameter int unsigned MAXG = 4,
  localparam int unsigned NPIX = POX*POY,
  localparam int unsigned OAW = (ODEPTH > 1) ? $clog2(ODEPTH) : 1,
  localparam int unsigned UAW = $clog2(UDEPTH),
  localparam int unsigned PW  = (POF > 1) ? $clog2(POF) : 1,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned GW  = (MAXG > 1) ? $clog2(MAXG) : 1,
  localparam int unsigned TADW = $clog2(ROWS*KMAX*KMAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  input  logic [GW:0]    ngroups,
  input  logic [15:0]    n_outer,      // WU map groups
  // output buffer read
  output logic           ob_re,
  output logic [OAW-1:0] ob_addr,
  input  logic [DW*NPIX-1:0] ob_rdata [POF],
  // weight-update result buffers read
  output logic           ub_re,
  output logic [UAW-1:0] ub_addr,
  input  data_t          ub_g,
  input  data_t          ub_w,
  // to the DMA
  output logic           wr_valid,
  output logic [AW-1:0]  wr_addr,
  output data_t          wr_data,
  input  logic           wr_ready,
  output logic           busy,
  output logic           done
);
  typedef enum logic [1:0] {G_IDLE, G_READ, G_SEND} gstate_e;
  gstate_e st;
  logic [15:0] i0, i1, i2, i3, i4, l0, l1, l2, l3, l4;
  logic [AW-1:0] run;
  logic skip;
  logic [PW-1:0] lane, lane_q;
  int unsigned   pixi;
  logic [$clog2(NPIX)-1:0] pix_q;
  logic          sel_w, sel_w_q, use_ub, use_ub_q;
  logic [AW-1:0] addr_c;
  logic [PW-1:0] t_col;
  logic [TADW-1:0] t_addr;
  logic [15:0]   imap;
  logic [TADW-1:0] t_unused_raddr [POF];
  logic [PW-1:0]   t_unused_rot;
  int            gpr, gx, gy;

  // loop limits per operation
  always_comb begin
    l0 = 16'd1; l1 = 16'd1; l2 = 16'd1; l3 = 16'd1; l4 = 16'd1;
    unique case (cfg.op)
      OP_CONV: if (cfg.phase == PH_WU) begin
                 l0 = n_outer; l1 = 16'(ngroups); l2 = 16'(cfg.nof);
                 l3 = 16'(cfg.nox); l4 = 16'(cfg.nox);
               end else begin
                 l2 = 16'(cfg.nof); l3 = 16'(cfg.nox); l4 = 16'(cfg.nox);
               end
      OP_POOL:   begin l2 = 16'(cfg.nch); l3 = 16'(cfg.nox); l4 = 16'(cfg.nox); end
      OP_UPSAMP: begin l2 = 16'(cfg.nch); l3 = 16'(cfg.nox) << 1; l4 = 16'(cfg.nox) << 1; end
      OP_LOSS:   l4 = 16'(cfg.nch);
      OP_WUPD:   begin l0 = cfg.batch_done ? 16'd2 : 16'd1; l4 = cfg.nelem; end
      default: ;
    endcase
  end

  address_translator #(.POF(POF), .ROWS(ROWS), .KMAX(KMAX)) u_at (
    .transpose(1'b0), .row('0), .j('0), .ky('0), .kx('0), .nk('0), .raddr(t_unused_raddr), .rot(t_unused_rot),
    .w_row(RW'(16'(cfg.wrow) + imap)), .w_j(PW'(i2)), .w_ky(4'(i3)), .w_kx(4'(i4)),
    .w_col(t_col), .w_addr(t_addr)
  );

  // address and source of the current element
  always_comb begin
    gpr   = (cfg.nox == 0) ? 1 : POX / int'(cfg.nox);
    gx    = (cfg.lb && gpr != 0) ? int'(i1) % gpr : 0;
    gy    = (cfg.lb && gpr != 0) ? int'(i1) / gpr : 0;
    imap  = i0 * 16'(ngroups) + i1;
    skip  = 1'b0;
    sel_w = 1'b0;
    use_ub = 1'b0;
    ob_addr = '0;
    lane  = '0;
    pixi  = 0;
    addr_c = cfg.out_base + run;
    unique case (cfg.op)
      OP_CONV: if (cfg.phase == PH_WU) begin
                 ob_addr = OAW'(i0);
                 lane    = PW'(i2);
                 pixi    = (gy*int'(cfg.nox) + int'(i3))*POX + gx*int'(cfg.nox) + int'(i4);
                 skip    = (imap >= 16'(cfg.nch));
                 addr_c  = cfg.out_base + AW'(t_addr) * AW'(POF) + AW'(t_col);
               end else begin
                 lane = PW'(i2);
                 pixi = int'(i3)*POX + int'(i4);
               end
      OP_POOL, OP_UPSAMP: begin
                 ob_addr = OAW'(i2 >> PW);
                 lane    = PW'(i2);
                 pixi    = int'(i3)*POX + int'(i4);
               end
      OP_LOSS: begin
                 ob_addr = OAW'(i4 >> PW);
                 lane    = PW'(i4);
                 addr_c  = cfg.out_base + AW'(i4);
               end
      OP_WUPD: begin
                 use_ub = 1'b1;
                 sel_w  = (i0 == 16'd1);
                 addr_c = (i0 == 16'd1) ? cfg.out_base + AW'(i4) : cfg.out2_base + AW'(i4);
               end
      default: ;
    endcase
    ub_addr = UAW'(i4);
  end

  assign ob_re    = (st == G_READ);
  assign ub_re    = (st == G_READ);
  assign wr_valid = (st == G_SEND);
  assign busy     = (st != G_IDLE);
  always_comb begin
    if (use_ub_q) wr_data = sel_w_q ? ub_w : ub_g;
    else          wr_data = data_t'(ob_rdata[lane_q][DW*int'(pix_q) +: DW]);
  end

  logic last_elem;
  assign last_elem = (i4 + 16'd1 == l4) && (i3 + 16'd1 == l3) && (i2 + 16'd1 == l2) &&
                     (i1 + 16'd1 == l1) && (i0 + 16'd1 == l0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; done <= 1'b0; run <= '0;
      i0 <= '0; i1 <= '0; i2 <= '0; i3 <= '0; i4 <= '0;
      wr_addr <= '0; lane_q <= '0; pix_q <= '0; sel_w_q <= 1'b0; use_ub_q <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin
          i0 <= '0; i1 <= '0; i2 <= '0; i3 <= '0; i4 <= '0; run <= '0;
          if (l0 == 0 || l1 == 0 || l2 == 0 || l3 == 0 || l4 == 0) done <= 1'b1;
          else st <= G_READ;
        end
        G_READ: begin
          wr_addr  <= addr_c;
          lane_q   <= lane;
          pix_q    <= $bits(pix_q)'(pixi);
          sel_w_q  <= sel_w;
          use_ub_q <= use_ub;
          if (skip) begin
            // group beyond the last input map: nothing to send
            if (last_elem) begin st <= G_IDLE; done <= 1'b1; end
          end else st <= G_SEND;
        end
        G_SEND: if (wr_ready) begin
          run <= run + AW'(1);
          if (last_elem) begin st <= G_IDLE; done <= 1'b1; end
          else st <= G_READ;
        end
        default: st <= G_IDLE;
      endcase
      // advance the counters after an element is finished
      if ((st == G_READ && skip) || (st == G_SEND && wr_ready)) begin
        if (i4 + 16'd1 != l4) i4 <= i4 + 16'd1;
        else begin
          i4 <= '0;
          if (i3 + 16'd1 != l3) i3 <= i3 + 16'd1;
          else begin
            i3 <= '0;
            if (i2 + 16'd1 != l2) i2 <= i2 + 16'd1;
            else begin
              i2 <= '0;
              if (i1 + 16'd1 != l1) i1 <= i1 + 16'd1;
              else begin
                i1 <= '0;
                if (i0 + 16'd1 != l0) begin i0 <= i0 + 16'd1; run <= '0; end
                else i0 <= '0;
              end
            end
          end
        end
      end
    end
  end
endmodule
