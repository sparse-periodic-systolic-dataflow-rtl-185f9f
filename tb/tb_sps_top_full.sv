// End-to-end testbench of sps_top at its default size: the 32 x 16 array with
// P = 8 and KSS = 2. It runs a 2x2-pixel layer with 128 input and 256 output
// channels (IC_p = 16 fills the 16 columns, OC_p = 32 fills the 32 rows),
// ReLU and 2x2 max pooling on it, and then a second layer of 256 -> 128
// channels fed from the first layer's output buffer with no channel
// reordering (INC_p = 2 tiles). Outputs are compared with a reference
// convolution in natural channel order and the convolution time is checked
// cycle-exactly. The body is in tb_sps_top_body.svh.
module tb_sps_top_full;
  localparam int unsigned PP = sps_pkg::P;
  localparam int unsigned KS = sps_pkg::KSS;
  localparam int unsigned SW = sps_pkg::SYS_W;
  localparam int unsigned SH = sps_pkg::SYS_H;

  logic clk = 0;
  always #5 clk = ~clk;

  `include "tb_sps_top_body.svh"

  sps_top dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    layer_test(128, 256, 2, 2, 1'b1, 1'b1);
    next_layer_test(128);
    coverage_report();
    checks += 4;
    if (n_wrap == 0) begin failures++; $display("index wrap never happened"); end
    if (n_relu == 0) begin failures++; $display("ReLU never ran"); end
    if (n_pool == 0) begin failures++; $display("max pooling never ran"); end
    if (n_nlr == 0)  begin failures++; $display("next-layer hand-over never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
