// sps_top: sparse periodic systolic (SPS) convolution accelerator.
//
// One convolution layer, pruned with periodic pattern-based sparsity, runs
// as follows. The host (through the DRAM-side ports below) loads the
// zero-padded input map into the input buffer, each PE's nonzero weights into
// its weight BRAM, the W_NUM kernel coordinates of the P patterns into the
// weight index buffer and any post-processing instructions into the ALU
// instruction queue, then pulses start with the layer sizes in cfg.
//
//   controller -> input matching unit -> systolic array -> tree adders
//                 (index buffer,          (per-PE weight    (one per row)
//                  input buffer)           BRAMs)               |
//                                                          output buffer
//                                                 vector unit <-> |
//
// The controller issues one step of the loop nest per cycle. The input
// matching unit turns the step into an index buffer entry, reads the kernel
// coordinates of the nonzero weight and fetches the SW activations that meet
// it. They enter row 0 of the SH x SW array and move down; each PE multiplies
// them with its own weight and accumulates. At the end of each output block
// the tree adder of each row sums the row and writes the result to the output
// buffer, in the grouped channel order that the next layer reads directly.
// With cfg.accum set the result is added to the word already there instead
// (the word is read as the sum leaves the tree and written one cycle later),
// so a layer's input channels can be run in several passes.
// When the convolution has drained, the vector processing unit runs the
// queued instructions (ReLU, 2x2 max pooling) on the output buffer, then
// done pulses and the host reads the results through ob_raddr / ob_rdata
// (one cycle latency, only while busy is low).
//
// The structure follows the paper's architecture figure; array size,
// widths, depths, the memory layouts and all handshakes are this design's
// choices (see the README).
module sps_top
  import sps_pkg::*;
#(
  parameter int unsigned PP   = P,
  parameter int unsigned KS   = KSS,
  parameter int unsigned SW   = SYS_W,
  parameter int unsigned SH   = SYS_H,
  localparam int unsigned NUM = PP * KS,
  localparam int unsigned XAW = (NUM > 1) ? $clog2(NUM) : 1,
  localparam int unsigned RW  = (SH > 1) ? $clog2(SH) : 1,
  localparam int unsigned CW  = (SW > 1) ? $clog2(SW) : 1,
  localparam int unsigned TL  = (SW > 1) ? $clog2(SW) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // layer control
  input  layer_cfg_t                  cfg,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  // weight index buffer load
  input  logic                        idx_we,
  input  logic [XAW-1:0]              idx_addr,
  input  logic [IDX_W-1:0]            idx_kh,
  input  logic [IDX_W-1:0]            idx_kw,
  // input buffer load
  input  logic                        ib_we,
  input  logic [IA_W-1:0]             ib_waddr,
  input  logic [SW-1:0][DATA_W-1:0]   ib_wdata,
  // weight load
  input  logic                        wl_we,
  input  logic [RW-1:0]               wl_row,
  input  logic [CW-1:0]               wl_col,
  input  logic [WA_W-1:0]             wl_addr,
  input  logic [DATA_W-1:0]           wl_data,
  // ALU instruction queue load
  input  logic                        iq_push,
  input  vinstr_t                     iq_data,
  output logic                        iq_full,
  // output read-out
  input  logic [OA_W-1:0]             ob_raddr,
  output logic [SH-1:0][ACC_W-1:0]    ob_rdata
);

  // Controller ----------------------------------------------------------
  step_t step;
  logic  conv_busy, conv_done;

  sps_controller #(.PP(PP), .KS(KS), .DRAIN(SH + TL + 5)) u_ctrl (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (start && !busy),
    .cfg    (cfg),
    .step_o (step),
    .busy   (conv_busy),
    .done   (conv_done)
  );

  // Keep the layer sizes the IMU needs.
  layer_cfg_t cfg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               cfg_q <= '0;
    else if (start && !busy)  cfg_q <= cfg;
  end

  // Weight index buffer and input matching unit --------------------------
  logic [XAW-1:0]           ix_raddr;
  logic [IDX_W-1:0]         ix_kh, ix_kw;
  logic [IA_W-1:0]          ib_raddr;
  logic [SW*DATA_W-1:0]     ib_rdata;
  logic [SW*DATA_W-1:0]     act;
  step_ctl_t                a_ctl;
  logic [WA_W-1:0]          a_waddr;
  logic [OA_W-1:0]          a_oaddr;
  logic                     wrap;

  sps_index_buffer #(.NUM(NUM), .IW(IDX_W)) u_idx (
    .clk     (clk),
    .wr_en   (idx_we),
    .wr_addr (idx_addr),
    .wr_kh   (idx_kh),
    .wr_kw   (idx_kw),
    .rd_addr (ix_raddr),
    .rd_kh   (ix_kh),
    .rd_kw   (ix_kw)
  );

  sps_input_buffer #(.LANES(SW), .DW(DATA_W), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk   (clk),
    .we    (ib_we),
    .waddr (ib_waddr),
    .wdata (ib_wdata),
    .raddr (ib_raddr),
    .rdata (ib_rdata)
  );

  sps_imu #(.PP(PP), .KS(KS), .SW(SW), .DW(DATA_W), .IBA_W(IA_W)) u_imu (
    .clk        (clk),
    .rst_n      (rst_n),
    .step_i     (step),
    .w_in       (cfg_q.w_in),
    .inc_p      (cfg_q.inc_p),
    .idx_addr_o (ix_raddr),
    .idx_kh_i   (ix_kh),
    .idx_kw_i   (ix_kw),
    .ib_raddr_o (ib_raddr),
    .ib_rdata_i (ib_rdata),
    .act_o      (act),
    .ctl_o      (a_ctl),
    .waddr_o    (a_waddr),
    .oaddr_o    (a_oaddr),
    .wrap_o     (wrap)
  );

  // Systolic array with per-PE weight BRAMs -----------------------------
  logic [SH-1:0][SW-1:0][ACC_W-1:0] ps;
  logic [SH-1:0]                    ps_valid;
  logic [SH-1:0][OA_W-1:0]          ps_oaddr;

  sps_array #(.SW(SW), .SH(SH), .DW(DATA_W), .AW(ACC_W)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .act_in   (act),
    .ctl_in   (a_ctl),
    .waddr_in (a_waddr),
    .oaddr_in (a_oaddr),
    .wl_we    (wl_we),
    .wl_row   (wl_row),
    .wl_col   (wl_col),
    .wl_addr  (wl_addr),
    .wl_data  (wl_data),
    .ps_out   (ps),
    .ps_valid (ps_valid),
    .ps_oaddr (ps_oaddr)
  );

  // One tree adder per row ------------------------------------------------
  logic [SH-1:0]             t_valid;
  logic [SH-1:0][ACC_W-1:0]  t_sum;
  logic [SH-1:0][OA_W-1:0]   t_addr;

  for (genvar j = 0; j < SH; j++) begin : g_tree
    sps_tree_adder #(.N(SW), .AW(ACC_W), .TW(OA_W)) u_tree (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (ps_valid[j]),
      .in_data   (ps[j]),
      .in_tag    (ps_oaddr[j]),
      .out_valid (t_valid[j]),
      .out_sum   (t_sum[j]),
      .out_tag   (t_addr[j])
    );
  end

  // Output buffer, instruction queue, vector unit -----------------------
  logic                      v_en, v_busy, v_pop, v_we;
  logic [OA_W-1:0]           v_raddr, v_waddr;
  logic [SH-1:0][ACC_W-1:0]  v_wdata;
  vinstr_t                   iq_head;
  logic                      iq_empty;

  // Layer state (sequenced at the end of the module).
  typedef enum logic [1:0] {T_IDLE, T_CONV, T_VPU} tstate_e;
  tstate_e tstate;

  // Write-back: one cycle after the tree, adding the old word if accumulating.
  // Consecutive results of one row go to different words, so the word read
  // for a result is never one still being written.
  logic                      accum_q;
  logic [SH-1:0]             wb_valid;
  logic [SH-1:0][ACC_W-1:0]  wb_sum, wb_data;
  logic [SH-1:0][OA_W-1:0]   wb_addr, ob_ra;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accum_q  <= 1'b0;
      wb_valid <= '0;
      wb_sum   <= '0;
      wb_addr  <= '0;
    end else begin
      if (start && tstate == T_IDLE) accum_q <= cfg.accum;
      wb_valid <= t_valid;
      wb_sum   <= t_sum;
      wb_addr  <= t_addr;
    end
  end

  for (genvar j = 0; j < SH; j++) begin : g_wb
    assign wb_data[j] = wb_sum[j] + (accum_q ? ob_rdata[j] : '0);
    // during the convolution each bank reads the word its row will update
    assign ob_ra[j]   = (tstate == T_CONV) ? t_addr[j] : (v_en ? v_raddr : ob_raddr);
  end

  sps_output_buffer #(.NB(SH), .AW(ACC_W), .DEPTH(OBUF_DEPTH)) u_obuf (
    .clk    (clk),
    .bwe    (wb_valid),
    .bwaddr (wb_addr),
    .bwdata (wb_data),
    .vwe    (v_we),
    .vwaddr (v_waddr),
    .vwdata (v_wdata),
    .raddr  (ob_ra),
    .rdata  (ob_rdata)
  );

  sps_instr_queue #(.DEPTH(IQ_DEPTH)) u_iq (
    .clk       (clk),
    .rst_n     (rst_n),
    .push      (iq_push && !iq_full),
    .push_data (iq_data),
    .full      (iq_full),
    .pop       (v_pop),
    .head      (iq_head),
    .empty     (iq_empty)
  );

  sps_vpu #(.NL(SH), .AW(ACC_W), .XW(OA_W)) u_vpu (
    .clk      (clk),
    .rst_n    (rst_n),
    .enable   (v_en),
    .iq_head  (iq_head),
    .iq_empty (iq_empty),
    .iq_pop   (v_pop),
    .ob_raddr (v_raddr),
    .ob_rdata (ob_rdata),
    .ob_we    (v_we),
    .ob_waddr (v_waddr),
    .ob_wdata (v_wdata),
    .busy     (v_busy)
  );

  // Layer sequencing: convolution, then vector unit, then done.

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tstate <= T_IDLE;
    else unique case (tstate)
      T_IDLE: if (start) tstate <= T_CONV;
      T_CONV: if (conv_done) tstate <= T_VPU;
      T_VPU:  if (iq_empty && !v_busy) tstate <= T_IDLE;
      default: tstate <= T_IDLE;
    endcase
  end

  assign v_en = (tstate == T_VPU);
  assign busy = (tstate != T_IDLE);
  assign done = (tstate == T_VPU) && iq_empty && !v_busy;

  // The vector unit never writes while the array does.
  a_no_write_clash: assert property (@(posedge clk) disable iff (!rst_n) !(v_we && |wb_valid));

  // conv_busy is implied by tstate; kept for the assertion below.
  a_conv_in_conv: assert property (@(posedge clk) disable iff (!rst_n) conv_busy |-> tstate == T_CONV);

endmodule
