// cnn_train_top: CNN training engine -- forward pass, backward pass and weight
// update on one reusable Pox x Poy x Pof MAC array.
//
// A host (the schedule the compiler emits) starts one layer tile at a time
// with a layer descriptor. The global controller then
//   1. loads: DMA manager -> DMA engine -> data scatter fill the input buffer,
//      the transposable weight buffer, the local-gradient buffer or the
//      weight-update buffers from DRAM;
//   2. computes: the loop sequencer steps the data router, the weight buffers
//      and the MAC array (conv/FC in FP, BP, WU), the pooling comparators, the
//      upsampling unit, the loss unit or the weight-update unit;
//   3. stores: the data gather writes the results back to DRAM.
// Activation gradients (ReLU) and pooling indices stay on chip in their own
// buffers, written in FP and read in BP.
// Datapath timing from a sequencer step at cycle t: buffers and router
// register at t+1, MACs / comparators / units produce at t+2, results are
// written to the output buffer at t+2 when the step closed a sum.
// DRAM port: 16-bit words, req/gnt handshake, in-order rvalid read data.
// Default sizes are the paper's 1X design (8 x 8 x 16 MACs); buffer sizes are
// this design's choice (see the README).
module cnn_train_top
  import train_pkg::*;
#(
  parameter int unsigned POX    = 8,
  parameter int unsigned POY    = 8,
  parameter int unsigned POF    = 16,
  parameter int unsigned NCH    = 64,    // maps held by the input buffer
  parameter int unsigned TI     = 10,    // input tile edge
  parameter int unsigned MAXG   = 4,     // load-balancer groups / input banks
  parameter int unsigned ROWS   = 256,   // kernel-block rows of the weight buffer
  parameter int unsigned KMAX   = 4,     // largest kernel edge
  parameter int unsigned ODEPTH = 16,    // output buffer words (POF tiles each)
  parameter int unsigned ADEPTH = 64,    // AG / index buffer words
  parameter int unsigned UDEPTH = 4096   // weight-update buffer words
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  layer_cfg_t    cfg_in,
  output logic          busy,
  output logic          done,
  output logic [2:0]    phase_id,
  output logic          dram_req,
  output logic          dram_we,
  output logic [AW-1:0] dram_addr,
  output data_t         dram_wdata,
  input  logic          dram_gnt,
  input  logic          dram_rvalid,
  input  data_t         dram_rdata
);
  localparam int unsigned NPIX = POX*POY;
  localparam int unsigned CW   = $clog2(NCH);
  localparam int unsigned TW   = $clog2(TI);
  localparam int unsigned GW   = (MAXG > 1) ? $clog2(MAXG) : 1;
  localparam int unsigned PW   = (POF > 1) ? $clog2(POF) : 1;
  localparam int unsigned WDEPTH = ROWS*KMAX*KMAX;
  localparam int unsigned WAW  = $clog2(WDEPTH);
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned LDEPTH = NPIX;
  localparam int unsigned LAW  = $clog2(LDEPTH);
  localparam int unsigned UAW  = $clog2(UDEPTH);
  localparam int unsigned OAW  = (ODEPTH > 1) ? $clog2(ODEPTH) : 1;
  localparam int unsigned AAW  = $clog2(ADEPTH);
  localparam int unsigned PK   = 2;                 // pooling window
  localparam int unsigned IW   = $clog2(PK*PK);

  layer_cfg_t cfg;
  logic [GW:0] ngroups;

  // ---------------- control ----------------
  logic mgr_start, mgr_done, rd_idle, wr_idle, seq_start, seq_done, gat_start, gat_done;
  logic [15:0] n_outer;
  logic [3:0]  seq_nk;
  logic        sum_all;

  global_controller #(.MAXG(MAXG)) u_ctl (
    .clk, .rst_n, .start, .cfg_in, .cfg, .busy, .done, .ngroups,
    .mgr_start, .mgr_done, .rd_idle, .wr_idle,
    .seq_start, .n_outer, .nk(seq_nk), .sum_all, .seq_done,
    .gat_start, .gat_done, .phase_id
  );

  // ---------------- DMA, scatter ----------------
  logic  desc_valid, desc_ready;
  desc_t desc;
  logic  sc_valid, sc_first;
  dst_e  sc_dst;
  data_t sc_data;
  logic  wr_valid, wr_ready;
  logic [AW-1:0] wr_addr;
  data_t wr_data;

  dma_manager u_mgr (
    .clk, .rst_n, .start(mgr_start), .cfg, .desc_valid, .desc, .desc_ready, .done(mgr_done)
  );

  dma_engine u_dma (
    .clk, .rst_n, .desc_valid, .desc, .desc_ready,
    .sc_valid, .sc_first, .sc_dst, .sc_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready, .rd_idle, .wr_idle,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata
  );

  logic           ib_we;
  logic [CW-1:0]  ib_ch;
  logic [TW-1:0]  ib_y, ib_x;
  logic           tw_we;
  logic [PW-1:0]  tw_col;
  logic [WAW-1:0] tw_addr;
  logic [POF-1:0] lg_we;
  logic [LAW-1:0] lg_waddr;
  logic [3:0]     wu_we;
  logic [UAW-1:0] wu_waddr;
  data_t          sc_wdata;

  data_scatter #(.POX(POX), .POF(POF), .NCH(NCH), .TI(TI), .WDEPTH(WDEPTH),
                 .LDEPTH(LDEPTH), .UDEPTH(UDEPTH)) u_sc (
    .clk, .rst_n, .nix(cfg.nix), .nk(cfg.nk),
    .valid(sc_valid), .first(sc_first), .dst(sc_dst), .data(sc_data),
    .ib_we, .ib_ch, .ib_y, .ib_x, .tw_we, .tw_col, .tw_addr,
    .lg_we, .lg_addr(lg_waddr), .wu_we, .wu_addr(wu_waddr), .wdata(sc_wdata)
  );

  // ---------------- loop sequencer ----------------
  logic        step, first, last, seq_busy;
  logic [15:0] c;
  logic [3:0]  ky, kx;

  conv_controller u_seq (
    .clk, .rst_n, .start(seq_start), .hold(1'b0), .n_outer, .nk(seq_nk), .sum_all,
    .busy(seq_busy), .step, .c, .ky, .kx, .first, .last, .done(seq_done)
  );

  // pipeline of step attributes: _1 = t+1, _2 = t+2
  logic        step_1, first_1, last_1, step_2, last_2;
  logic [15:0] c_1, c_2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_1 <= 1'b0; first_1 <= 1'b0; last_1 <= 1'b0; step_2 <= 1'b0; last_2 <= 1'b0;
      c_1 <= '0; c_2 <= '0;
    end else begin
      step_1 <= step; first_1 <= first; last_1 <= last && step; c_1 <= c;
      step_2 <= step_1; last_2 <= last_1; c_2 <= c_1;
    end
  end

  wire op_conv = (cfg.op == OP_CONV);
  wire is_wu   = op_conv && (cfg.phase == PH_WU);
  wire is_bp   = op_conv && (cfg.phase == PH_BP);
  wire is_fp   = op_conv && (cfg.phase == PH_FP);

  // ---------------- input buffer + data router ----------------
  logic [CW-1:0] r_ch [NPIX];
  logic [TW-1:0] r_y [NPIX], r_x [NPIX];
  data_t         ib_rdata [NPIX];
  data_t         pix [NPIX];
  logic          pix_ok [NPIX];

  input_buffer #(.NCH(NCH), .TI(TI), .NRD(NPIX)) u_ib (
    .clk, .we(ib_we), .w_ch(ib_ch), .w_y(ib_y), .w_x(ib_x), .wdata(sc_wdata),
    .r_ch, .r_y, .r_x, .rdata(ib_rdata)
  );

  logic [1:0] rt_stride;
  logic [3:0] rt_nox;
  always_comb begin
    rt_stride = (cfg.op == OP_POOL) ? 2'(PK) : (cfg.op == OP_CONV) ? cfg.stride : 2'd1;
    rt_nox    = (cfg.op == OP_LOSS) ? 4'd1 : cfg.nox;
  end

  data_router #(.POX(POX), .POY(POY), .NCH(NCH), .TI(TI), .MAXG(MAXG)) u_rt (
    .clk, .rst_n, .en(step), .wu_mode(is_wu), .lb_en(cfg.lb), .c, .ky, .kx,
    .stride(rt_stride), .pad(op_conv ? cfg.pad : 2'd0), .nix((cfg.op == OP_LOSS) ? 5'd1 : cfg.nix),
    .nox(rt_nox), .nch(cfg.nch), .ngroups,
    .r_ch, .r_y, .r_x, .rdata(ib_rdata), .pix, .pix_ok
  );

  // ---------------- weights: transposable buffer, local gradients ----------------
  data_t twb_rdata [POF];
  logic [DW-1:0] lg_rdata [POF];
  logic [DW-1:0] lg_wdata [POF];
  data_t lg_w [POF];
  data_t wt [POF];

  transposable_weight_buffer #(.POF(POF), .ROWS(ROWS), .KMAX(KMAX)) u_twb (
    .clk, .rst_n, .we(tw_we), .wcol(tw_col), .waddr(tw_addr), .wdata(sc_wdata),
    .re(step && (is_fp || is_bp)), .transpose(is_bp),
    .row(is_bp ? RW'(cfg.wrow) : RW'(16'(cfg.wrow) + c)), .j(PW'(c)),
    .ky, .kx, .nk(cfg.nk), .rdata(twb_rdata)
  );

  always_comb begin
    for (int f = 0; f < POF; f++) begin
      lg_wdata[f] = sc_wdata;
      lg_w[f]     = data_t'(lg_rdata[f]);
    end
  end

  lane_ram #(.LANES(POF), .LW(DW), .DEPTH(LDEPTH)) u_lgbuf (
    .clk, .we(lg_we), .waddr(lg_waddr), .wdata(lg_wdata),
    .re(step && is_wu), .raddr(LAW'(int'(ky) * POX + int'(kx))), .rdata(lg_rdata)
  );

  weight_router #(.POF(POF)) u_wr (
    .phase(cfg.phase), .nrows(cfg.nof), .twb(twb_rdata), .lgrad(lg_w), .wt
  );

  // ---------------- MAC array ----------------
  acc_t acc [POF][NPIX];
  mac_array #(.POX(POX), .POY(POY), .POF(POF)) u_mac (
    .clk, .rst_n, .en(step_1 && op_conv), .clr(first_1 && op_conv),
    .pix, .pix_ok, .wt, .acc
  );

  // ---------------- AG and index buffers ----------------
  logic [NPIX-1:0]    ag_wdata [POF], ag_rdata [POF];
  logic [IW*NPIX-1:0] ix_wdata [POF], ix_rdata [POF];
  logic [POF-1:0]     ag_we, ix_we;
  logic [AAW-1:0]     ag_waddr, ag_raddr, ix_waddr;

  assign ag_raddr = AAW'(16'(cfg.ag_base) + ((cfg.op == OP_UPSAMP) ? (c >> PW) : 16'd0));

  lane_ram #(.LANES(POF), .LW(NPIX), .DEPTH(ADEPTH)) u_agbuf (
    .clk, .we(ag_we), .waddr(ag_waddr), .wdata(ag_wdata),
    .re(step), .raddr(ag_raddr), .rdata(ag_rdata)
  );

  lane_ram #(.LANES(POF), .LW(IW*NPIX), .DEPTH(ADEPTH)) u_ixbuf (
    .clk, .we(ix_we), .waddr(ix_waddr), .wdata(ix_wdata),
    .re(step), .raddr(ag_raddr), .rdata(ix_rdata)
  );

  // ---------------- ReLU / scaling of MAC results ----------------
  data_t           mac_out [POF][NPIX];
  logic [NPIX-1:0] mac_ag  [POF];
  logic [1:0]      relu_mode;
  assign relu_mode = (is_fp && cfg.relu) ? 2'd1 : (is_bp && cfg.relu) ? 2'd2 : 2'd0;

  for (genvar f = 0; f < POF; f++) begin : g_relu
    relu_unit #(.N(NPIX)) u_relu (
      .mode(relu_mode), .shift(cfg.shift), .acc(acc[f]), .ag_in(ag_rdata[f]),
      .dout(mac_out[f]), .ag_out(mac_ag[f])
    );
  end

  // ---------------- pooling comparators ----------------
  data_t         pool_max [NPIX];
  logic [IW-1:0] pool_idx [NPIX];
  for (genvar p = 0; p < NPIX; p++) begin : g_pool
    pooling_unit #(.K(PK)) u_pool (
      .clk, .rst_n, .en(step_1 && cfg.op == OP_POOL), .first(first_1),
      .pix(pix[p]), .max_q(pool_max[p]), .idx_q(pool_idx[p])
    );
  end

  // ---------------- upsampling ----------------
  logic [IW-1:0] up_idx [NPIX];
  data_t         up_out [NPIX];
  logic [PW-1:0] lane_1;
  assign lane_1 = PW'(c_1);
  always_comb for (int p = 0; p < NPIX; p++) up_idx[p] = ix_rdata[lane_1][IW*p +: IW];

  upsampling_unit #(.POX(POX), .POY(POY), .K(PK)) u_up (
    .clk, .en(step_1 && cfg.op == OP_UPSAMP), .scale_en(cfg.relu),
    .grad(pix), .idx(up_idx), .ag(ag_rdata[lane_1]), .dout(up_out)
  );

  // ---------------- loss ----------------
  data_t ubuf_rd [4];      // old weight (labels), moment, old grad, current grad
  data_t loss_g, loss_q;
  loss_unit u_loss (
    .kind(cfg.loss), .frac(cfg.shift[3:0]), .a(pix[0]), .y(ubuf_rd[0]), .grad(loss_g)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) loss_q <= '0;
    else if (step_1) loss_q <= loss_g;
  end

  // ---------------- weight update ----------------
  logic [UAW-1:0] ub_gaddr;
  logic           ub_gre;
  for (genvar b = 0; b < 4; b++) begin : g_ubuf
    logic [DW-1:0] wd [1], rd [1];
    assign wd[0] = sc_wdata;
    lane_ram #(.LANES(1), .LW(DW), .DEPTH(UDEPTH)) u_ub (
      .clk, .we(wu_we[b]), .waddr(wu_waddr), .wdata(wd),
      .re(step), .raddr(UAW'(c)), .rdata(rd)
    );
    assign ubuf_rd[b] = data_t'(rd[0]);
  end

  logic  wu_vld;
  data_t wu_g, wu_w;
  weight_update_unit u_wu (
    .clk, .rst_n, .en(step_1 && cfg.op == OP_WUPD), .first_img(cfg.first_img),
    .batch_done(cfg.batch_done), .alpha(cfg.alpha), .beta(cfg.beta),
    .w_old(ubuf_rd[0]), .m_old(ubuf_rd[1]), .g_old(ubuf_rd[2]), .g_cur(ubuf_rd[3]),
    .vld(wu_vld), .g_acc(wu_g), .w_new(wu_w)
  );

  // new weight / new gradient buffers
  logic [DW-1:0] nw_wd [2], nw_rd [2];
  assign nw_wd[0] = wu_g;
  assign nw_wd[1] = wu_w;
  lane_ram #(.LANES(2), .LW(DW), .DEPTH(UDEPTH)) u_newbuf (
    .clk, .we({wu_vld, wu_vld}), .waddr(UAW'(c_2)), .wdata(nw_wd),
    .re(ub_gre), .raddr(ub_gaddr), .rdata(nw_rd)
  );

  // ---------------- output buffer write (t+2) ----------------
  logic [POF-1:0]         ob_we;
  logic [OAW-1:0]         ob_waddr;
  logic [DW*NPIX-1:0]     ob_wdata [POF];
  logic [DW*NPIX-1:0]     ob_rdata [POF];
  logic                   ob_re;
  logic [OAW-1:0]         ob_raddr;
  logic [PW-1:0]          lane_2;
  assign lane_2 = PW'(c_2);

  always_comb begin
    ob_we = '0; ob_waddr = '0; ag_we = '0; ix_we = '0;
    ag_waddr = AAW'(cfg.ag_base);
    ix_waddr = AAW'(16'(cfg.ag_base) + (c_2 >> PW));
    for (int f = 0; f < POF; f++) begin
      ob_wdata[f] = '0;
      ag_wdata[f] = mac_ag[f];
      ix_wdata[f] = '0;
      for (int p = 0; p < NPIX; p++) begin
        ix_wdata[f][IW*p +: IW] = pool_idx[p];
        unique case (cfg.op)
          OP_CONV:   ob_wdata[f][DW*p +: DW] = mac_out[f][p];
          OP_POOL:   ob_wdata[f][DW*p +: DW] = pool_max[p];
          OP_UPSAMP: ob_wdata[f][DW*p +: DW] = up_out[p];
          OP_LOSS:   ob_wdata[f][DW*p +: DW] = (p == 0) ? loss_q : '0;
          default:   ob_wdata[f][DW*p +: DW] = '0;
        endcase
      end
    end
    if (last_2) begin
      unique case (cfg.op)
        OP_CONV: begin
          ob_we    = '1;
          ob_waddr = is_wu ? OAW'(c_2) : '0;
          if (is_fp && cfg.relu) ag_we = '1;
        end
        OP_POOL: begin
          ob_we[lane_2] = 1'b1; ob_waddr = OAW'(c_2 >> PW);
          ix_we[lane_2] = 1'b1;
        end
        OP_UPSAMP, OP_LOSS: begin
          ob_we[lane_2] = 1'b1; ob_waddr = OAW'(c_2 >> PW);
        end
        default: ;
      endcase
    end
  end

  lane_ram #(.LANES(POF), .LW(DW*NPIX), .DEPTH(ODEPTH)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata)
  );

  // ---------------- gather ----------------
  logic gat_busy;
  data_gather #(.POX(POX), .POY(POY), .POF(POF), .ODEPTH(ODEPTH), .UDEPTH(UDEPTH),
                .ROWS(ROWS), .KMAX(KMAX), .MAXG(MAXG)) u_gat (
    .clk, .rst_n, .start(gat_start), .cfg, .ngroups, .n_outer,
    .ob_re, .ob_addr(ob_raddr), .ob_rdata,
    .ub_re(ub_gre), .ub_addr(ub_gaddr), .ub_g(data_t'(nw_rd[0])), .ub_w(data_t'(nw_rd[1])),
    .wr_valid, .wr_addr, .wr_data, .wr_ready, .busy(gat_busy), .done(gat_done)
  );

endmodule
