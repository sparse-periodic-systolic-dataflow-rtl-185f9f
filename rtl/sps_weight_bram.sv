// sps_weight_bram: the weight memory of one processing element.
//
// Weights stay in the PE (weight-stationary): each PE owns one block RAM
// next to its multiplier and holds the nonzero weights it will use for the
// whole layer, in the order the dataflow visits them. Simple dual-port RAM:
// a write port for loading from DRAM and a read port with a registered
// output, valid one cycle after a read with re set. 2048 x 8 bits fits one
// 18 Kb FPGA block RAM; that size is this design's choice.
module sps_weight_bram
  import sps_pkg::*;
#(
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned DEPTH = WBRAM_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
