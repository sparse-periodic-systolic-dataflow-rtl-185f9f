// Workload testbench: convolution layers of VGG16 on 32x32 CIFAR-10 images,
// pruned with P = 8, KSS = 2, on sps_top at its default size (32 x 16 PEs).
// Layer shapes (channels, map size) are those of VGG16; weights and images
// are random. Layers are chained the way the network runs them, each one
// reading the previous layer's results (or its pooled map) from the output
// buffer without reordering channels:
//   conv1_1   3 ->  64, 32x32   ReLU (one real input channel per 16 lanes)
//   conv1_2  64 ->  64, 32x32   from conv1_1, ReLU and 2x2 max pooling
//   conv2_1  64 -> 128, 16x16   from conv1_2's pooled map, ReLU
//   conv3_2 256 -> 256,  8x8    random input, ReLU and pooling (two input tiles)
//   conv4_1 256 -> 512,  4x4    from conv3_2's pooled map (two output tiles)
//   conv5_1 512 -> 512,  2x2    random input (four input tiles, two output
//                               tiles, 1024 weights per PE)
// Every output, after the convolution and after each vector operation, is
// checked against a reference computed in natural channel order, and the
// convolution time of each layer to the cycle. The body is in
// tb_sps_top_body.svh.
module tb_sps_vgg16;
  localparam int unsigned PP = sps_pkg::P;
  localparam int unsigned KS = sps_pkg::KSS;
  localparam int unsigned SW = sps_pkg::SYS_W;
  localparam int unsigned SH = sps_pkg::SYS_H;

  logic clk = 0;
  always #5 clk = ~clk;

  `include "tb_sps_top_body.svh"

  sps_top dut (.*);

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    layer_test(3, 64, 32, 32, 1'b1, 1'b0);
    next_layer_test(64, 1'b0, 1'b1, 1'b1);
    next_layer_test(128, 1'b1, 1'b1, 1'b0);
    layer_test(256, 256, 8, 8, 1'b1, 1'b1);
    next_layer_test(512, 1'b1, 1'b0, 1'b0);
    layer_test(512, 512, 2, 2, 1'b0, 1'b0);
    coverage_report();
    checks += 3;
    if (n_relu == 0) begin failures++; $display("ReLU never ran"); end
    if (n_pool == 0) begin failures++; $display("max pooling never ran"); end
    if (n_nlr == 0)  begin failures++; $display("next-layer hand-over never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
