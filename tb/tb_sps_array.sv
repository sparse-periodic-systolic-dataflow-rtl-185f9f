// Testbench for sps_array at 4 rows x 3 columns: loads every PE's weight
// BRAM through the load port, streams blocks of steps into row 0 and checks,
// for every row j, that the row's partial sums
//     PS[j][i] = sum over the block of W[j][i][waddr] * A[i]
// and the block's output address appear with ps_valid exactly j + 2 cycles
// after the block's last step entered row 0 (one cycle of skew per row).
module tb_sps_array;
  import sps_pkg::*;
  localparam int unsigned SW = 3, SH = 4, DEPTHW = 32;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [SW-1:0][7:0] act_in;
  step_ctl_t ctl_in;
  logic [WA_W-1:0] waddr_in, wl_addr;
  logic [OA_W-1:0] oaddr_in;
  logic wl_we;
  logic [1:0] wl_row, wl_col;
  logic [7:0] wl_data;
  logic [SH-1:0][SW-1:0][31:0] ps_out;
  logic [SH-1:0] ps_valid;
  logic [SH-1:0][OA_W-1:0] ps_oaddr;
  logic signed [7:0] wm [SH][SW][DEPTHW];
  int checks = 0, failures = 0;

  sps_array #(.SW(SW), .SH(SH)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int ps [SW]; int oaddr; } exp_t;
  exp_t exp_q [SH][int];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < SH; j++) begin
      if (exp_q[j].exists(cyc)) begin
        checks++;
        if (!ps_valid[j] || int'(ps_oaddr[j]) != exp_q[j][cyc].oaddr) begin
          failures++; $display("cycle %0d row %0d: valid %0b oaddr %0d", cyc, j, ps_valid[j], ps_oaddr[j]);
        end
        for (int i = 0; i < SW; i++) begin
          checks++;
          if (int'(ps_out[j][i]) != exp_q[j][cyc].ps[i]) begin
            failures++; $display("cycle %0d PE(%0d,%0d): %0d want %0d", cyc, j, i, int'(ps_out[j][i]), exp_q[j][cyc].ps[i]);
          end
        end
      end else if (ps_valid[j]) begin
        checks++; failures++; $display("cycle %0d row %0d: unexpected ps_valid", cyc, j);
      end
    end
  end

  initial begin
    rst_n = 0; act_in = '0; ctl_in = '0; waddr_in = 0; oaddr_in = 0;
    wl_we = 0; wl_row = 0; wl_col = 0; wl_addr = 0; wl_data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; j < SH; j++)
      for (int i = 0; i < SW; i++)
        for (int a = 0; a < DEPTHW; a++) begin
          @(negedge clk);
          wl_we = 1; wl_row = 2'(j); wl_col = 2'(i); wl_addr = WA_W'(a);
          wl_data = 8'($urandom); wm[j][i][a] = wl_data;
        end
    @(negedge clk); wl_we = 0;
    for (int blk = 0; blk < 30; blk++) begin
      int len, oa;
      int acc [SH][SW];
      len = $urandom_range(1, 8);
      oa = $urandom_range(0, 4095);
      for (int j = 0; j < SH; j++) for (int i = 0; i < SW; i++) acc[j][i] = 0;
      for (int s = 0; s < len; s++) begin
        int wa;
        wa = $urandom_range(0, DEPTHW - 1);
        @(posedge clk); #1;
        ctl_in.valid = 1; ctl_in.clear = (s == 0); ctl_in.last = (s == len - 1);
        waddr_in = WA_W'(wa); oaddr_in = OA_W'(oa);
        for (int i = 0; i < SW; i++) act_in[i] = 8'($urandom);
        for (int j = 0; j < SH; j++)
          for (int i = 0; i < SW; i++) acc[j][i] += int'(wm[j][i][wa]) * int'($signed(act_in[i]));
        if (s == len - 1)
          for (int j = 0; j < SH; j++) begin
            exp_t e;
            for (int i = 0; i < SW; i++) e.ps[i] = acc[j][i];
            e.oaddr = oa;
            exp_q[j][cyc + j + 2] = e;
          end
      end
      if ($urandom_range(0, 2) == 0) begin
        @(posedge clk); #1 ctl_in = '0;
      end
    end
    @(posedge clk); #1 ctl_in = '0;
    repeat (SH + 4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
