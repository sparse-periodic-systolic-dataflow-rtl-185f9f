// sps_output_buffer: on-chip buffer for the output feature map.
//
// NB banks, one per array row, each NB-th lane of a word. Bank j of word
// (pix*P + g)*ONC_p + cc holds output channel g + P*(cc*SYS_H + j) of pixel
// pix: results are kept in the grouped order the dataflow produces them.
// That order is also the one the next layer reads its input channels in
// (sps_imu), so the channels are never sorted back into natural order; this
// is how next layer reordering shows up in hardware.
//
// Ports:
//   bank write, one per bank (tree adder of that row; rows finish on
//     different cycles, so each bank has its own address);
//   word write, all banks at one address (vector processing unit);
//   read, registered, data one cycle after raddr; each bank has its own
//     read address, so rows can read back the words they are about to
//     update while accumulating (all equal for a whole-word read).
// A bank write wins over a word write to the same bank in the same cycle;
// the control never issues both.
module sps_output_buffer
  import sps_pkg::*;
#(
  parameter int unsigned NB    = SYS_H,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned DEPTH = OBUF_DEPTH,
  localparam int unsigned XW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic [NB-1:0]             bwe,
  input  logic [NB-1:0][XW-1:0]     bwaddr,
  input  logic [NB-1:0][AW-1:0]     bwdata,
  input  logic                      vwe,
  input  logic [XW-1:0]             vwaddr,
  input  logic [NB-1:0][AW-1:0]     vwdata,
  input  logic [NB-1:0][XW-1:0]     raddr,
  output logic [NB-1:0][AW-1:0]     rdata
);

  for (genvar j = 0; j < NB; j++) begin : g_bank
    logic [AW-1:0] mem [DEPTH];
    logic          we;
    logic [XW-1:0] wa;
    logic [AW-1:0] wd;

    always_comb begin
      we = bwe[j] | vwe;
      wa = bwe[j] ? bwaddr[j] : vwaddr;
      wd = bwe[j] ? bwdata[j] : vwdata[j];
    end

    always_ff @(posedge clk) begin
      if (we) mem[wa] <= wd;
      rdata[j] <= mem[raddr[j]];
    end
  end

endmodule
