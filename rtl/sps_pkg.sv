// sps_pkg: types and constants shared by the sparse periodic systolic (SPS)
// accelerator.
//
// The pruning constants P (periodicity, also the number of kernel variants)
// and KSS (nonzero weights per kernel) default to the evaluated setting,
// P = 8 and KSS = 2. W_NUM = P*KSS is the number of entries in each of the
// two weight index buffers. The array size (16 columns of input channels by
// 32 rows of output channels), the data widths and the buffer depths are this
// design's own choices; they are explained in the README.
package sps_pkg;

  // Pruning parameters of the periodic pattern-based sparsity.
  localparam int unsigned P     = 8;
  localparam int unsigned KSS   = 2;
  localparam int unsigned W_NUM = P * KSS;

  // Systolic array: SYS_W columns (input channels), SYS_H rows (output channels).
  localparam int unsigned SYS_W = 16;
  localparam int unsigned SYS_H = 32;

  // Data widths: 8-bit activations and weights, 32-bit partial sums.
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;
  // One kernel coordinate (kh or kw) of a 3x3 kernel.
  localparam int unsigned IDX_W  = 2;

  // Memory depths (words).
  localparam int unsigned WBRAM_DEPTH = 2048;  // per-PE weight BRAM
  localparam int unsigned IBUF_DEPTH  = 16384; // input buffer, SYS_W lanes per word
  localparam int unsigned OBUF_DEPTH  = 16384; // output buffer, SYS_H lanes per word
  localparam int unsigned IQ_DEPTH    = 8;     // ALU instruction queue entries

  // Width of the layer-size fields of the configuration.
  localparam int unsigned DIM_W = 8;

  // Per-layer configuration, written by the host before start.
  typedef struct packed {
    logic [DIM_W-1:0] h_out;   // output rows
    logic [DIM_W-1:0] w_out;   // output columns
    logic [DIM_W-1:0] w_in;    // padded input width (w_out + kernel width - 1)
    logic [DIM_W-1:0] inc_p;   // INC_p: input-channel tiles per group
    logic [DIM_W-1:0] onc_p;   // ONC_p: output-channel tiles per group
    logic             accum;   // add results to the output buffer instead of
                               // writing them (input channels run in passes)
  } layer_cfg_t;

  // Vector processing unit operations.
  typedef enum logic [1:0] {
    VOP_NOP     = 2'd0,
    VOP_RELU    = 2'd1,
    VOP_MAXPOOL = 2'd2   // 2x2 window, stride 2
  } vop_e;

  // One entry of the ALU instruction queue.
  typedef struct packed {
    vop_e        op;
    logic [15:0] src;    // first output buffer word read
    logic [15:0] dst;    // first output buffer word written
    logic [7:0]  height; // source feature map rows
    logic [7:0]  width;  // source feature map columns
    logic [7:0]  wpp;    // output buffer words per pixel (P * ONC_p)
  } vinstr_t;

  // Address widths of the memories.
  localparam int unsigned WA_W = $clog2(WBRAM_DEPTH);
  localparam int unsigned IA_W = $clog2(IBUF_DEPTH);
  localparam int unsigned OA_W = $clog2(OBUF_DEPTH);

  // Control that travels with the data through the IMU and down the array.
  typedef struct packed {
    logic valid;   // a MAC step
    logic clear;   // first step of an output block: restart the partial sum
    logic last;    // final step of an output block: partial sums are complete
  } step_ctl_t;

  // One step of the loop nest, as issued by the controller. The i and j
  // loops are the array itself; cc only shows up in the output address.
  typedef struct packed {
    step_ctl_t        ctl;
    logic [DIM_W-1:0] oh;
    logic [DIM_W-1:0] ow;
    logic [DIM_W-1:0] g;      // filter group (output channels g + P*m)
    logic [DIM_W-1:0] kv;     // kernel slot (input channels kv + P*n)
    logic [DIM_W-1:0] w;      // nonzero weight of the kernel variant
    logic [DIM_W-1:0] rr;     // input-channel tile
    logic [WA_W-1:0]  waddr;  // PE weight BRAM address
    logic [OA_W-1:0]  oaddr;  // output buffer word of this output block
  } step_t;

endpackage
