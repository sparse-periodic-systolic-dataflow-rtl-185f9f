// sps_input_buffer: on-chip buffer that caches the input feature map.
//
// Each word holds SYS_W activations: the SYS_W input channels of one pixel
// that one step of the dataflow feeds to the SYS_W columns of the array (see
// sps_imu for the layout). The host writes the zero-padded map from DRAM
// through the write port; the input matching unit reads one word per cycle.
// Simple dual-port RAM, registered read: rdata is valid one cycle after
// raddr. The depth is this design's choice and covers every VGG16 layer on
// 32x32 CIFAR-10 images.
module sps_input_buffer
  import sps_pkg::*;
#(
  parameter int unsigned LANES = SYS_W,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned DEPTH = IBUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [LANES*DW-1:0] wdata,
  input  logic [AW-1:0]       raddr,
  output logic [LANES*DW-1:0] rdata
);

  logic [LANES*DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
