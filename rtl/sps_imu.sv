// sps_imu: the input matching unit.
//
// For every step of the loop nest it finds the activations that meet the
// nonzero weight the PEs are about to use. Because the kernel variant of a
// kernel rotates with period P across both input and output channels, the
// w-th nonzero weight of slot kv in filter group g sits at index buffer entry
//     ((g + kv) * KSS + w) mod W_NUM
// (the formula of the paper). g + kv < 2P, so the modulo is one conditional
// subtraction; wrap_o marks the steps where it applies. The entry gives the
// kernel coordinates (kh, kw), and with stride 1 over a zero-padded input the
// activations are those of pixel (oh + kh, ow + kw). The input buffer keeps
// one word per (pixel, slot kv, tile rr) holding the SYS_W input channels
// kv + P*(rr*SYS_W + i), so a single read returns the whole activation
// vector for row 0 of the array. The word address is
//     ((y * w_in + x) * P + kv) * INC_p + rr.
// This layout is this design's choice; it is the order produced by the
// previous layer's output buffer, so no channel reordering is needed between
// layers.
//
// Timing: the step is taken combinationally to the index buffer; the input
// buffer address is registered (cycle 1) and the buffer answers one cycle
// later (cycle 2). act_o and the step fields on the output are aligned, two
// cycles after step_i.
module sps_imu
  import sps_pkg::*;
#(
  parameter int unsigned PP    = P,
  parameter int unsigned KS    = KSS,
  parameter int unsigned SW    = SYS_W,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned IBA_W = IA_W,
  localparam int unsigned NUM  = PP * KS,
  localparam int unsigned XAW  = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  step_t              step_i,
  input  logic [DIM_W-1:0]   w_in,     // padded input width
  input  logic [DIM_W-1:0]   inc_p,    // INC_p
  // weight index buffer
  output logic [XAW-1:0]     idx_addr_o,
  input  logic [IDX_W-1:0]   idx_kh_i,
  input  logic [IDX_W-1:0]   idx_kw_i,
  // input buffer
  output logic [IBA_W-1:0]   ib_raddr_o,
  input  logic [SW*DW-1:0]   ib_rdata_i,
  // to row 0 of the systolic array
  output logic [SW*DW-1:0]   act_o,
  output step_ctl_t          ctl_o,
  output logic [WA_W-1:0]    waddr_o,
  output logic [OA_W-1:0]    oaddr_o,
  output logic               wrap_o
);

  // Index buffer entry of this step.
  logic [DIM_W+7:0] raw_idx;
  always_comb begin
    raw_idx = ((DIM_W+8)'(step_i.g) + (DIM_W+8)'(step_i.kv)) * (DIM_W+8)'(KS) + (DIM_W+8)'(step_i.w);
    wrap_o  = step_i.ctl.valid && (raw_idx >= (DIM_W+8)'(NUM));
    if (raw_idx >= (DIM_W+8)'(NUM)) idx_addr_o = XAW'(raw_idx - (DIM_W+8)'(NUM));
    else                            idx_addr_o = XAW'(raw_idx);
  end

  // Input buffer word address of the matching activations.
  logic [31:0] y, x, word;
  always_comb begin
    y    = 32'(step_i.oh) + 32'(idx_kh_i);
    x    = 32'(step_i.ow) + 32'(idx_kw_i);
    word = ((y * 32'(w_in) + x) * 32'(PP) + 32'(step_i.kv)) * 32'(inc_p) + 32'(step_i.rr);
  end

  // Stage 1: register the address; stage 2: buffer data returns.
  step_ctl_t        ctl1;
  logic [WA_W-1:0]  waddr1;
  logic [OA_W-1:0]  oaddr1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ib_raddr_o <= '0;
      ctl1       <= '0;
      waddr1     <= '0;
      oaddr1     <= '0;
      ctl_o      <= '0;
      waddr_o    <= '0;
      oaddr_o    <= '0;
    end else begin
      ib_raddr_o <= IBA_W'(word);
      ctl1       <= step_i.ctl;
      waddr1     <= step_i.waddr;
      oaddr1     <= step_i.oaddr;
      ctl_o      <= ctl1;
      waddr_o    <= waddr1;
      oaddr_o    <= oaddr1;
    end
  end

  assign act_o = ib_rdata_i;

endmodule
