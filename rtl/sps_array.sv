// sps_array: the two-dimensional systolic array of processing elements.
//
// SH rows by SW columns. Column i works on input channel lane i and row j on
// output channel lane j of the current tile, so PE (j, i) performs
//     PS[j][i] += W[j][i] * A[i]
// of the paper's loop nest. The activation vector enters row 0 and every PE
// passes its activation to the PE below one cycle later, so all PEs of a
// column see the same activation without a broadcast net. The step control
// (valid / clear / last), the weight address and the output address travel
// down with it in one register stage per row; row j is therefore j cycles
// behind row 0.
//
// Each row reports its SW partial sums with a one-cycle ps_valid pulse
// 2 cycles after the 'last' step reached it, together with the output buffer
// word (ps_oaddr) the sum of the row belongs to.
//
// Weights are loaded one at a time: wl_row / wl_col select the PE whose
// BRAM takes wl_data at wl_addr.
module sps_array
  import sps_pkg::*;
#(
  parameter int unsigned SW  = SYS_W,
  parameter int unsigned SH  = SYS_H,
  parameter int unsigned DW  = DATA_W,
  parameter int unsigned AW  = ACC_W,
  localparam int unsigned RW = (SH > 1) ? $clog2(SH) : 1,
  localparam int unsigned CW = (SW > 1) ? $clog2(SW) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [SW-1:0][DW-1:0]        act_in,
  input  step_ctl_t                    ctl_in,
  input  logic [WA_W-1:0]              waddr_in,
  input  logic [OA_W-1:0]              oaddr_in,
  // weight load
  input  logic                         wl_we,
  input  logic [RW-1:0]                wl_row,
  input  logic [CW-1:0]                wl_col,
  input  logic [WA_W-1:0]              wl_addr,
  input  logic [DW-1:0]                wl_data,
  // results, one set per row
  output logic [SH-1:0][SW-1:0][AW-1:0] ps_out,
  output logic [SH-1:0]                ps_valid,
  output logic [SH-1:0][OA_W-1:0]      ps_oaddr
);

  step_ctl_t             rctl   [SH];
  logic [WA_W-1:0]       rwaddr [SH];
  logic [OA_W-1:0]       roaddr [SH];
  logic [OA_W-1:0]       oaddr_d1 [SH];
  logic [SH-1:0][SW-1:0][DW-1:0] a_out;
  logic [SH-1:0][SW-1:0] pe_valid;

  assign rctl[0]   = ctl_in;
  assign rwaddr[0] = waddr_in;
  assign roaddr[0] = oaddr_in;

  for (genvar j = 1; j < SH; j++) begin : g_rowpipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rctl[j]   <= '0;
        rwaddr[j] <= '0;
        roaddr[j] <= '0;
      end else begin
        rctl[j]   <= rctl[j-1];
        rwaddr[j] <= rwaddr[j-1];
        roaddr[j] <= roaddr[j-1];
      end
    end
  end

  for (genvar j = 0; j < SH; j++) begin : g_row
    // Output address follows the PE's two-stage latency.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        oaddr_d1[j]   <= '0;
        ps_oaddr[j]   <= '0;
      end else begin
        oaddr_d1[j]   <= roaddr[j];
        ps_oaddr[j]   <= oaddr_d1[j];
      end
    end

    for (genvar i = 0; i < SW; i++) begin : g_col
      logic [DW-1:0] a_src;
      if (j == 0) begin : g_top
        assign a_src = act_in[i];
      end else begin : g_below
        assign a_src = a_out[j-1][i];
      end

      sps_pe #(.DW(DW), .AW(AW)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_in     (a_src),
        .ctl_in   (rctl[j]),
        .waddr_in (rwaddr[j]),
        .wl_we    (wl_we && (wl_row == RW'(j)) && (wl_col == CW'(i))),
        .wl_addr  (wl_addr),
        .wl_data  (wl_data),
        .a_out    (a_out[j][i]),
        .ps       (ps_out[j][i]),
        .ps_valid (pe_valid[j][i])
      );
    end

    // All PEs of a row see the same control, so any of them gives the row's pulse.
    assign ps_valid[j] = &pe_valid[j];
  end

endmodule
