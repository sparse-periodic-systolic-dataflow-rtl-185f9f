// End-to-end testbench of sps_top on a reduced 4 x 4 array (P = 8, KSS = 2
// as in the evaluated design). It runs
//   1. a 4x4-pixel layer, 24 -> 40 channels: both channel counts leave the
//      array partly idle, so systolic padding of weights and activations is
//      exercised, and ONC_p = 2 output tiles are used;
//   2. a second layer, 40 -> 16 channels, fed from the first layer's output
//      buffer without any channel reordering;
//   3. a 16 -> 32 layer followed by a NOP, ReLU and 2x2 max pooling in the
//      vector unit;
//   4. a 40 -> 24 layer on a 4x2 map run in two passes, the second adding
//      its sums to the first pass's results in the output buffer, then ReLU.
// Every output channel is compared with a reference convolution in natural
// channel order, the convolution time is checked cycle-exactly, and each
// mechanism (index wrap, padding, ReLU, max pooling, NOP, next-layer
// hand-over, accumulation) must occur at least once. The body is in tb_sps_top_body.svh.
module tb_sps_top;
  localparam int unsigned PP = 8;
  localparam int unsigned KS = 2;
  localparam int unsigned SW = 4;
  localparam int unsigned SH = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  `include "tb_sps_top_body.svh"

  sps_top #(.PP(PP), .KS(KS), .SW(SW), .SH(SH)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    layer_test(24, 40, 4, 4, 1'b0, 1'b0);
    next_layer_test(16);
    queue(sps_pkg::VOP_NOP, 0, 0, 0, 0, 0);
    layer_test(16, 32, 4, 4, 1'b1, 1'b1);
    accum_layer_test(40, 24, 4, 2, 1'b1, 1'b0);
    coverage_report();
    checks += 8;
    if (n_wrap == 0)  begin failures++; $display("index wrap never happened"); end
    if (n_pad_w == 0) begin failures++; $display("weight padding never happened"); end
    if (n_pad_a == 0) begin failures++; $display("activation padding never happened"); end
    if (n_relu == 0)  begin failures++; $display("ReLU never ran"); end
    if (n_pool == 0)  begin failures++; $display("max pooling never ran"); end
    if (n_nop == 0)   begin failures++; $display("NOP never ran"); end
    if (n_nlr == 0)   begin failures++; $display("next-layer hand-over never happened"); end
    if (n_accum == 0) begin failures++; $display("accumulation never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
