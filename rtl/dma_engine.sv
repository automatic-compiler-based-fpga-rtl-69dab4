// dma_engine: moves words between DRAM and the on-chip buffers.
//
// Read: takes one descriptor (valid/ready), issues len read requests at
// base, base+1, ... and forwards every returned word to the data scatter with
// its destination; `sc_first` marks the first word of a descriptor. The next
// descriptor is accepted once all words of the current one have returned.
// Write: accepts (address, word) beats from the data gather; wr_ready is the
// DRAM grant, and reads take priority. `rd_idle`/`wr_idle` tell the global
// controller when a phase has drained.
// DRAM port: a request is taken in a cycle where req && gnt; read data comes
// back in request order, marked by rvalid, after any latency. The paper uses
// a vendor DMA and DDR3 controller; this engine is this design's own simple
// stand-in with 16-bit words.
module dma_engine
  import train_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // descriptors
  input  logic          desc_valid,
  input  desc_t         desc,
  output logic          desc_ready,
  // to the data scatter
  output logic          sc_valid,
  output logic          sc_first,
  output dst_e          sc_dst,
  output data_t         sc_data,
  // from the data gather
  input  logic          wr_valid,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  output logic          wr_ready,
  output logic          rd_idle,
  output logic          wr_idle,
  // DRAM
  output logic          dram_req,
  output logic          dram_we,
  output logic [AW-1:0] dram_addr,
  output data_t         dram_wdata,
  input  logic          dram_gnt,
  input  logic          dram_rvalid,
  input  data_t         dram_rdata
);
  logic          active;
  desc_t         cur;
  logic [15:0]   issued, returned;
  logic          rd_req, got_first;

  assign rd_req     = active && (issued != cur.len);
  assign desc_ready = !active;
  assign dram_req   = rd_req || wr_valid;
  assign dram_we    = !rd_req && wr_valid;
  assign dram_addr  = rd_req ? cur.base + AW'(issued) : wr_addr;
  assign dram_wdata = wr_data;
  assign wr_ready   = !rd_req && dram_gnt;
  assign rd_idle    = !active;
  assign wr_idle    = !wr_valid;

  assign sc_valid = active && dram_rvalid;
  assign sc_first = !got_first;
  assign sc_dst   = cur.dst;
  assign sc_data  = dram_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cur <= '0; issued <= '0; returned <= '0; got_first <= 1'b0;
    end else begin
      if (!active) begin
        if (desc_valid) begin
          cur <= desc; issued <= '0; returned <= '0; got_first <= 1'b0;
          active <= (desc.len != 0);
        end
      end else begin
        if (rd_req && dram_gnt) issued <= issued + 16'd1;
        if (dram_rvalid) begin
          returned  <= returned + 16'd1;
          got_first <= 1'b1;
          if (returned + 16'd1 == cur.len) active <= 1'b0;
        end
      end
    end
  end
endmodule
