// sps_index_buffer: the weight index buffer.
//
// Periodic pattern-based sparsity allows only P kernel variants (patterns),
// each with KSS nonzero weights, so the position of every nonzero weight of a
// whole layer is described by W_NUM = P*KSS kernel coordinates. As in the
// paper, they are kept in two small buffers of W_NUM entries, one for the
// kernel row (kh) and one for the kernel column (kw). Entry kv*KSS + w holds
// the w-th nonzero position of kernel variant kv.
//
// Interface: one entry is written per cycle with wr_en. The read is
// combinational (distributed LUT memory, as the paper puts these indices in
// CLBs); the contents are not reset and must be loaded before use.
module sps_index_buffer
  import sps_pkg::*;
#(
  parameter int unsigned NUM  = W_NUM,
  parameter int unsigned IW   = IDX_W,
  localparam int unsigned AW  = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [IW-1:0] wr_kh,
  input  logic [IW-1:0] wr_kw,
  input  logic [AW-1:0] rd_addr,
  output logic [IW-1:0] rd_kh,
  output logic [IW-1:0] rd_kw
);

  logic [IW-1:0] kh_mem [NUM];
  logic [IW-1:0] kw_mem [NUM];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      kh_mem[wr_addr] <= wr_kh;
      kw_mem[wr_addr] <= wr_kw;
    end
  end

  assign rd_kh = kh_mem[rd_addr];
  assign rd_kw = kw_mem[rd_addr];

endmodule
