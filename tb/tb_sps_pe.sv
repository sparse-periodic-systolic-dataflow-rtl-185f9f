// Testbench for sps_pe: loads the PE's weight BRAM, then runs blocks of MAC
// steps (random lengths, random idle cycles, signed data). Checks the partial
// sum and its ps_valid pulse exactly two cycles after each block's last step,
// that no pulse appears otherwise, and that the activation leaves on a_out
// one cycle after it arrived.
module tb_sps_pe;
  import sps_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic signed [7:0] a_in, a_out;
  step_ctl_t ctl_in;
  logic [WA_W-1:0] waddr_in, wl_addr;
  logic wl_we;
  logic [7:0] wl_data;
  logic signed [31:0] ps;
  logic ps_valid;
  logic signed [7:0] wmem [64];
  int checks = 0, failures = 0;

  sps_pe dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected values indexed by the cycle they must appear on the outputs
  logic signed [31:0] exp_ps [int];
  logic signed [7:0]  exp_a  [int];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // checker: at each negedge compare with what was scheduled
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (exp_ps.exists(cyc)) begin
      if (!ps_valid || ps !== exp_ps[cyc]) begin
        failures++; $display("cycle %0d: ps %0d valid %0b, want %0d", cyc, ps, ps_valid, exp_ps[cyc]);
      end
    end else if (ps_valid) begin
      failures++; $display("cycle %0d: unexpected ps_valid", cyc);
    end
    if (exp_a.exists(cyc)) begin
      checks++;
      if (a_out !== exp_a[cyc]) begin failures++; $display("cycle %0d: a_out wrong", cyc); end
    end
  end

  initial begin
    int acc;
    rst_n = 0; a_in = 0; ctl_in = '0; waddr_in = 0; wl_we = 0; wl_addr = 0; wl_data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      wl_we = 1; wl_addr = WA_W'(a); wl_data = 8'($urandom); wmem[a] = wl_data;
    end
    @(negedge clk); wl_we = 0;
    // the checker starts now: set all expectations from here on
    for (int blk = 0; blk < 40; blk++) begin
      int len;
      len = $urandom_range(1, 12);
      acc = 0;
      for (int s = 0; s < len; s++) begin
        int wa;
        wa = $urandom_range(0, 63);
        @(posedge clk); #1;  // drive right after the edge: sampled at the next edge
        ctl_in.valid = 1; ctl_in.clear = (s == 0); ctl_in.last = (s == len - 1);
        a_in = 8'($urandom); waddr_in = WA_W'(wa);
        acc += int'(wmem[wa]) * int'(a_in);
        exp_a[cyc + 1] = a_in;
        if (s == len - 1) exp_ps[cyc + 2] = acc;
      end
      repeat ($urandom_range(0, 2)) begin
        @(posedge clk); #1;
        ctl_in = '0; a_in = 8'($urandom);
        exp_a[cyc + 1] = a_in;
      end
    end
    @(posedge clk); #1 ctl_in = '0;
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
