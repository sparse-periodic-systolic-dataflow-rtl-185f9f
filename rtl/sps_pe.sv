// sps_pe: one processing element of the systolic array.
//
// A PE is one multiplier with the block RAM next to it, as in the paper:
// the BRAM feeds a weight register, the activation arriving from the PE
// above is held in an activation register, and their product is added into
// the partial-sum register (weight- and output-stationary dataflow).
//
// Timing, two stages:
//   edge 1: weight <= BRAM[waddr_in]; activation and control registered.
//           a_out (to the PE below) is this activation register, so the
//           activation moves down one row per cycle.
//   edge 2: ps <= (clear ? 0 : ps) + weight * activation   (if valid)
//           ps_valid <= valid & last, a one-cycle pulse that marks ps as a
//           complete partial sum of an output block.
// Weights and activations are signed 8-bit, the partial sum is 32-bit and
// wraps; these widths are this design's choice.
module sps_pe
  import sps_pkg::*;
#(
  parameter int unsigned DW = DATA_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] a_in,
  input  step_ctl_t            ctl_in,
  input  logic [WA_W-1:0]      waddr_in,
  // weight load port
  input  logic                 wl_we,
  input  logic [WA_W-1:0]      wl_addr,
  input  logic [DW-1:0]        wl_data,
  output logic signed [DW-1:0] a_out,
  output logic signed [AW-1:0] ps,
  output logic                 ps_valid
);

  logic signed [DW-1:0] w_q;
  logic signed [DW-1:0] a_q;
  step_ctl_t            ctl_q;
  logic [DW-1:0]        w_raw;
  logic signed [2*DW-1:0] prod;

  sps_weight_bram #(.DW(DW), .DEPTH(WBRAM_DEPTH)) u_bram (
    .clk   (clk),
    .we    (wl_we),
    .waddr (wl_addr),
    .wdata (wl_data),
    .re    (ctl_in.valid),
    .raddr (waddr_in),
    .rdata (w_raw)
  );
  assign w_q  = w_raw;
  assign prod = w_q * a_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q      <= '0;
      ctl_q    <= '0;
      ps       <= '0;
      ps_valid <= 1'b0;
    end else begin
      a_q   <= a_in;
      ctl_q <= ctl_in;
      if (ctl_q.valid) begin
        ps <= (ctl_q.clear ? AW'(0) : ps) + AW'(prod);
      end
      ps_valid <= ctl_q.valid && ctl_q.last;
    end
  end

  assign a_out = a_q;

endmodule
