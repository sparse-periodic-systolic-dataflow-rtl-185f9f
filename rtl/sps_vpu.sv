// sps_vpu: the vector processing unit.
//
// NL lane ALUs, one per output buffer bank, that post-process a layer's
// results in the output buffer. It takes instructions from the ALU
// instruction queue whenever enable is high (the convolution of the layer
// has drained) and runs them one after another:
//   VOP_RELU    : for every word k < height*width*wpp,
//                 dst[k] = max(src[k], 0) lane by lane;
//   VOP_MAXPOOL : 2x2 max pooling with stride 2 of a height x width map with
//                 wpp words per pixel; output pixel (py, px), word k is the
//                 maximum of the four source pixels (2py+dy, 2px+dx), stored
//                 at dst + (py*(width/2) + px)*wpp + k;
//   VOP_NOP     : removed from the queue, nothing else.
// The paper names non-linear activation and max pooling as the unit's
// operations; the instruction format and this implementation are this
// design's own.
//
// Timing: one output buffer read is issued per cycle; data returns one
// cycle later. ReLU writes one word per cycle, max pooling one word every
// four cycles. busy is high from the cycle an instruction is taken until its
// last word is written.
module sps_vpu
  import sps_pkg::*;
#(
  parameter int unsigned NL  = SYS_H,
  parameter int unsigned AW  = ACC_W,
  parameter int unsigned XW  = OA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  // instruction queue
  input  vinstr_t              iq_head,
  input  logic                 iq_empty,
  output logic                 iq_pop,
  // output buffer
  output logic [XW-1:0]        ob_raddr,
  input  logic [NL-1:0][AW-1:0] ob_rdata,
  output logic                 ob_we,
  output logic [XW-1:0]        ob_waddr,
  output logic [NL-1:0][AW-1:0] ob_wdata,
  output logic                 busy
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_FLUSH} state_e;

  state_e      state;
  vinstr_t     ins;
  logic [7:0]  py, px, k;
  logic [1:0]  d;
  logic [23:0] n;         // ReLU word counter

  // Issue side ----------------------------------------------------------
  logic          is_pool;
  logic          iss_last;
  logic [31:0]   iss_raddr, iss_waddr;
  logic [7:0]    ho, wo;

  assign is_pool = (ins.op == VOP_MAXPOOL);
  assign ho      = ins.height >> 1;
  assign wo      = ins.width  >> 1;

  always_comb begin
    if (is_pool) begin
      iss_raddr = 32'(ins.src) +
                  ((32'(py) * 2 + 32'(d[1])) * 32'(ins.width) + 32'(px) * 2 + 32'(d[0])) * 32'(ins.wpp) + 32'(k);
      iss_waddr = 32'(ins.dst) + (32'(py) * 32'(wo) + 32'(px)) * 32'(ins.wpp) + 32'(k);
      iss_last  = (d == 2'd3) && (k == ins.wpp - 8'd1) && (px == wo - 8'd1) && (py == ho - 8'd1);
    end else begin
      iss_raddr = 32'(ins.src) + 32'(n);
      iss_waddr = 32'(ins.dst) + 32'(n);
      iss_last  = (n == 24'(ins.height) * 24'(ins.width) * 24'(ins.wpp) - 24'd1);
    end
  end

  assign ob_raddr = XW'(iss_raddr);
  assign iq_pop   = (state == S_IDLE) && enable && !iq_empty;
  assign busy     = (state != S_IDLE);

  // Read-return stage ---------------------------------------------------
  logic          r_valid, r_pool;
  logic [1:0]    r_d;
  logic [XW-1:0] r_waddr;
  logic [NL-1:0][AW-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ins     <= '0;
      py      <= '0;
      px      <= '0;
      k       <= '0;
      d       <= '0;
      n       <= '0;
      r_valid <= 1'b0;
      r_pool  <= 1'b0;
      r_d     <= '0;
      r_waddr <= '0;
    end else begin
      r_valid <= (state == S_ISSUE);
      r_pool  <= is_pool;
      r_d     <= d;
      r_waddr <= XW'(iss_waddr);
      unique case (state)
        S_IDLE: begin
          if (iq_pop) begin
            ins <= iq_head;
            py  <= '0;
            px  <= '0;
            k   <= '0;
            d   <= '0;
            n   <= '0;
            // An empty map has no words to process.
            if ((iq_head.op == VOP_RELU || iq_head.op == VOP_MAXPOOL) &&
                iq_head.height != 0 && iq_head.width != 0 && iq_head.wpp != 0 &&
                !(iq_head.op == VOP_MAXPOOL && (iq_head.height < 2 || iq_head.width < 2)))
              state <= S_ISSUE;
          end
        end
        S_ISSUE: begin
          if (iss_last) state <= S_FLUSH;
          if (is_pool) begin
            d <= d + 2'd1;
            if (d == 2'd3) begin
              if (k == ins.wpp - 8'd1) begin
                k <= '0;
                if (px == wo - 8'd1) begin
                  px <= '0;
                  py <= py + 8'd1;
                end else px <= px + 8'd1;
              end else k <= k + 8'd1;
            end
          end else begin
            n <= n + 24'd1;
          end
        end
        S_FLUSH: state <= S_IDLE;   // last word is written this cycle
        default: state <= S_IDLE;
      endcase
    end
  end

  // Lane ALUs -------------------------------------------------------------
  logic [NL-1:0][AW-1:0] mx;
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      if (r_d == 2'd0 || $signed(ob_rdata[l]) > $signed(acc[l])) mx[l] = ob_rdata[l];
      else                                                       mx[l] = acc[l];
    end
  end

  always_ff @(posedge clk) begin
    if (r_valid && r_pool) acc <= mx;
  end

  always_comb begin
    ob_we    = 1'b0;
    ob_waddr = r_waddr;
    ob_wdata = '0;
    if (r_valid) begin
      if (r_pool) begin
        ob_we    = (r_d == 2'd3);
        ob_wdata = mx;
      end else begin
        ob_we = 1'b1;
        for (int l = 0; l < NL; l++)
          ob_wdata[l] = $signed(ob_rdata[l]) < 0 ? '0 : ob_rdata[l];
      end
    end
  end

endmodule
