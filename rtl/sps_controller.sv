// sps_controller: sequencer of the sparse periodic systolic dataflow.
//
// It walks the loop nest of the dataflow, one step per clock:
//   for oh < h_out, ow < w_out              output pixel
//     for g < P, cc < ONC_p                 output block: filter group g,
//                                           output-channel tile cc
//       for kv < P, w < KSS, rr < INC_p     MAC steps of the block
// The two innermost loops of the paper (i over the array columns and j over
// its rows) are the array itself. Each step carries:
//   clear - first step of a block (kv = w = rr = 0): partial sums restart;
//   last  - final step of a block: partial sums are complete;
//   waddr - the PE weight BRAM address; weights are stored in the order the
//           steps visit them, so it counts up and restarts at every pixel;
//   oaddr - the output buffer word of the block, (pix*P + g)*ONC_p + cc,
//           which is simply the number of blocks issued so far.
// A layer takes h_out*w_out*P*ONC_p*P*KSS*INC_p steps with no stall; after
// the last step the controller waits DRAIN cycles, enough for the last
// result to reach the output buffer, then pulses done. start is taken when
// idle; cfg is sampled with it. The loop order is the paper's; the drain
// wait and the handshake are this design's choice.
module sps_controller
  import sps_pkg::*;
#(
  parameter int unsigned PP    = P,
  parameter int unsigned KS    = KSS,
  parameter int unsigned DRAIN = SYS_H + 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output step_t      step_o,
  output logic       busy,
  output logic       done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;

  state_e           state;
  layer_cfg_t       c;
  logic [DIM_W-1:0] oh, ow, g, cc, kv, w, rr;
  logic [WA_W-1:0]  waddr;
  logic [OA_W-1:0]  oaddr;
  logic [15:0]      dcnt;

  logic end_rr, end_w, end_kv, end_cc, end_g, end_ow, end_oh;
  assign end_rr = (rr == c.inc_p - 1'b1);
  assign end_w  = (w  == DIM_W'(KS - 1));
  assign end_kv = (kv == DIM_W'(PP - 1));
  assign end_cc = (cc == c.onc_p - 1'b1);
  assign end_g  = (g  == DIM_W'(PP - 1));
  assign end_ow = (ow == c.w_out - 1'b1);
  assign end_oh = (oh == c.h_out - 1'b1);

  logic blk_end, pix_end, layer_end;
  assign blk_end   = end_rr && end_w && end_kv;
  assign pix_end   = blk_end && end_cc && end_g;
  assign layer_end = pix_end && end_ow && end_oh;

  always_comb begin
    step_o           = '0;
    step_o.ctl.valid = (state == S_RUN);
    step_o.ctl.clear = (state == S_RUN) && (kv == 0) && (w == 0) && (rr == 0);
    step_o.ctl.last  = (state == S_RUN) && blk_end;
    step_o.oh        = oh;
    step_o.ow        = ow;
    step_o.g         = g;
    step_o.kv        = kv;
    step_o.w         = w;
    step_o.rr        = rr;
    step_o.waddr     = waddr;
    step_o.oaddr     = oaddr;
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      {oh, ow, g, cc, kv, w, rr} <= '0;
      waddr <= '0;
      oaddr <= '0;
      dcnt  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          {oh, ow, g, cc, kv, w, rr} <= '0;
          waddr <= '0;
          oaddr <= '0;
          dcnt  <= '0;
          if (cfg.h_out == 0 || cfg.w_out == 0 || cfg.inc_p == 0 || cfg.onc_p == 0)
            state <= S_DONE;
          else
            state <= S_RUN;
        end
        S_RUN: begin
          // innermost to outermost: rr, w, kv, cc, g, ow, oh
          rr <= end_rr ? '0 : rr + 1'b1;
          if (end_rr) w <= end_w ? '0 : w + 1'b1;
          if (end_rr && end_w) kv <= end_kv ? '0 : kv + 1'b1;
          if (blk_end) begin
            oaddr <= oaddr + 1'b1;
            cc    <= end_cc ? '0 : cc + 1'b1;
            if (end_cc) g <= end_g ? '0 : g + 1'b1;
          end
          if (pix_end) begin
            waddr <= '0;
            ow    <= end_ow ? '0 : ow + 1'b1;
            if (end_ow) oh <= oh + 1'b1;
          end else begin
            waddr <= waddr + 1'b1;
          end
          if (layer_end) state <= S_DRAIN;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 16'(DRAIN - 1)) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
