// Testbench for sps_tree_adder: streams a random vector every cycle into a
// 16-input tree and a 5-input tree, and checks each sum and its tag arrive
// exactly ceil(log2 N) cycles later.
module tb_sps_tree_adder;
  import sps_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  localparam int unsigned N1 = 16, L1 = 4;
  localparam int unsigned N2 = 5,  L2 = 3;

  logic                 v_in;
  logic [N1-1:0][31:0]  d1;
  logic [N2-1:0][31:0]  d2;
  logic [11:0]          tg;
  logic                 ov1, ov2;
  logic [31:0]          s1, s2;
  logic [11:0]          t1, t2;

  sps_tree_adder #(.N(N1)) dut1 (.clk, .rst_n, .in_valid(v_in), .in_data(d1), .in_tag(tg),
                                 .out_valid(ov1), .out_sum(s1), .out_tag(t1));
  sps_tree_adder #(.N(N2)) dut2 (.clk, .rst_n, .in_valid(v_in), .in_data(d2), .in_tag(tg),
                                 .out_valid(ov2), .out_sum(s2), .out_tag(t2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp1 [int], exp2 [int];
  logic [11:0] expt [int];
  logic        expv [int];
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    rst_n = 0; v_in = 0; d1 = '0; d2 = '0; tg = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      v_in = ($urandom_range(0, 3) != 0);
      tg = 12'($urandom);
      exp1[cyc] = 0; exp2[cyc] = 0;
      for (int k = 0; k < N1; k++) begin d1[k] = $urandom; exp1[cyc] += d1[k]; end
      for (int k = 0; k < N2; k++) begin d2[k] = $urandom; exp2[cyc] += d2[k]; end
      expt[cyc] = tg; expv[cyc] = v_in;
      #1;
      if (cyc >= L1 + 3 && expv.exists(cyc - L1)) begin
        checks++;
        if (ov1 !== expv[cyc - L1] || (ov1 && (s1 !== exp1[cyc - L1] || t1 !== expt[cyc - L1]))) begin
          failures++; $display("N=16 cycle %0d: got %0h want %0h", cyc, s1, exp1[cyc - L1]);
        end
      end
      if (cyc >= L2 + 3 && expv.exists(cyc - L2)) begin
        checks++;
        if (ov2 !== expv[cyc - L2] || (ov2 && (s2 !== exp2[cyc - L2] || t2 !== expt[cyc - L2]))) begin
          failures++; $display("N=5 cycle %0d: got %0h want %0h", cyc, s2, exp2[cyc - L2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
