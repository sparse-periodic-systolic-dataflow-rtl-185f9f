// Testbench for sps_instr_queue: random pushes and pops against a model
// queue, checking head, empty and full; fills the queue to DEPTH to see full.
module tb_sps_instr_queue;
  import sps_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, push, pop, full, empty;
  vinstr_t push_data, head;
  vinstr_t model [$];
  int checks = 0, failures = 0, saw_full = 0;

  sps_instr_queue dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vinstr_t rnd();
    vinstr_t v;
    v = vinstr_t'({$urandom, $urandom, $urandom});
    v.op = vop_e'($urandom_range(0, 2));
    return v;
  endfunction

  task automatic step(bit do_push, bit do_pop);
    @(negedge clk);
    push = do_push && !full;
    pop  = do_pop && !empty;
    push_data = rnd();
    @(posedge clk);
    if (pop) void'(model.pop_front());
    if (push) model.push_back(push_data);
    #1;
    checks++;
    if (empty !== (model.size() == 0) || full !== (model.size() == IQ_DEPTH) ||
        (model.size() != 0 && head !== model[0])) begin
      failures++; $display("mismatch: size %0d empty %0b full %0b", model.size(), empty, full);
    end
    if (full) saw_full++;
  endtask

  initial begin
    rst_n = 0; push = 0; pop = 0; push_data = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < IQ_DEPTH + 2; n++) step(1, 0);
    for (int n = 0; n < 300; n++) step($urandom_range(0, 1), $urandom_range(0, 1));
    for (int n = 0; n < IQ_DEPTH + 2; n++) step(0, 1);
    checks++;
    if (saw_full == 0) begin failures++; $display("queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
