// sps_instr_queue: the ALU instruction queue.
//
// A first-in first-out queue of DEPTH vector-unit instructions (vinstr_t),
// filled from DRAM by the host and drained by the vector processing unit.
// head is the oldest entry and is valid while empty is low; pop removes it.
// A push while full or a pop while empty is ignored (and flagged by an
// assertion). Push and pop in the same cycle are both done. Depth and
// instruction format are this design's choice.
module sps_instr_queue
  import sps_pkg::*;
#(
  parameter int unsigned DEPTH = IQ_DEPTH,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    push,
  input  vinstr_t push_data,
  output logic    full,
  input  logic    pop,
  output vinstr_t head,
  output logic    empty
);

  vinstr_t         mem [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            do_push, do_pop;

  assign full    = (count == (PW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign head    = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("instruction queue: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("instruction queue: pop while empty");

endmodule
