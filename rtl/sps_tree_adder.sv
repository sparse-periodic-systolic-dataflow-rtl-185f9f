// sps_tree_adder: adds the partial sums of one PE row.
//
// After a block of steps each PE of a row holds the contribution of its
// input-channel lane to the same output value; the tree adder sums the N
// lanes. It is a binary tree with a register after every level, so it takes
// LAT = ceil(log2 N) cycles and accepts a new vector every cycle. A tag (the
// output buffer address of the sum) travels through the same pipeline. The
// paper names the tree adder; its pipelining is this design's choice. Sums
// wrap at AW bits.
module sps_tree_adder
  import sps_pkg::*;
#(
  parameter int unsigned N     = SYS_W,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned TW    = OA_W,
  localparam int unsigned LAT  = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][AW-1:0] in_data,
  input  logic [TW-1:0]       in_tag,
  output logic                out_valid,
  output logic [AW-1:0]       out_sum,
  output logic [TW-1:0]       out_tag
);

  // Number of operands at level l is ceil(N / 2^l).
  function automatic int unsigned width_at(int unsigned l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  logic [AW-1:0] lvl   [LAT+1][N];
  logic          vld   [LAT+1];
  logic [TW-1:0] tag   [LAT+1];

  for (genvar k = 0; k < N; k++) begin : g_in
    assign lvl[0][k] = in_data[k];
  end
  assign vld[0] = in_valid;
  assign tag[0] = in_tag;

  for (genvar l = 0; l < LAT; l++) begin : g_lvl
    localparam int unsigned WC = width_at(l);
    // Slots past the operands of a level hold zero (removed by synthesis).
    for (genvar k = 0; k < N; k++) begin : g_add
      logic [AW-1:0] nxt;
      if (2*k + 1 < WC) begin : g_pair
        assign nxt = lvl[l][2*k] + lvl[l][2*k+1];
      end else if (2*k < WC) begin : g_odd
        assign nxt = lvl[l][2*k];
      end else begin : g_none
        assign nxt = '0;
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) lvl[l+1][k] <= '0;
        else        lvl[l+1][k] <= nxt;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l+1] <= 1'b0;
        tag[l+1] <= '0;
      end else begin
        vld[l+1] <= vld[l];
        tag[l+1] <= tag[l];
      end
    end
  end

  assign out_valid = vld[LAT];
  assign out_sum   = lvl[LAT][0];
  assign out_tag   = tag[LAT];

endmodule
