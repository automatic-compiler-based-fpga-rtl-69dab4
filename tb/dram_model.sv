// dram_model: behavioural stand-in for the off-chip DDR memory (not RTL).
//
// 16-bit words, DEPTH words, address taken modulo DEPTH. A request is taken
// when req && gnt; gnt drops at random (about one cycle in STALL_IN) to
// exercise back-pressure. Read data returns LAT cycles later, in order, with
// rvalid. Testbenches read and write `mem` directly to set up and check data.
module dram_model
  import train_pkg::*;
#(
  parameter int unsigned DEPTH    = 65536,
  parameter int unsigned LAT      = 3,
  parameter int unsigned STALL_IN = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  data_t         wdata,
  output logic          gnt,
  output logic          rvalid,
  output data_t         rdata
);
  data_t mem [DEPTH];
  logic  vpipe [LAT];
  data_t dpipe [LAT];


  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt <= 1'b1;
      for (int i = 0; i < LAT; i++) begin vpipe[i] <= 1'b0; dpipe[i] <= '0; end
    end else begin
      gnt <= ($urandom_range(STALL_IN - 1) != 0);
      vpipe[0] <= req && gnt && !we;
      dpipe[0] <= mem[int'(addr) % DEPTH];
      for (int i = 1; i < LAT; i++) begin vpipe[i] <= vpipe[i-1]; dpipe[i] <= dpipe[i-1]; end
      if (req && gnt && we) mem[int'(addr) % DEPTH] <= wdata;
    end
  end
  assign rvalid = vpipe[LAT-1];
  assign rdata  = dpipe[LAT-1];
endmodule
