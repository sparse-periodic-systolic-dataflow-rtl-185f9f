// Testbench for sps_imu: random steps with a model index buffer and a model
// input buffer around the unit. Checks the index buffer entry
// ((g+kv)*KSS+w) mod W_NUM and the wrap flag in the same cycle, the input
// buffer address one cycle later, and that the activation word, the control,
// the weight address and the output address come out together two cycles
// after the step.
module tb_sps_imu;
  import sps_pkg::*;
  localparam int unsigned XAW = $clog2(W_NUM);
  localparam int unsigned WW  = SYS_W * DATA_W;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  step_t step_i;
  logic [DIM_W-1:0] w_in, inc_p;
  logic [XAW-1:0] idx_addr_o;
  logic [IDX_W-1:0] idx_kh_i, idx_kw_i;
  logic [IA_W-1:0] ib_raddr_o;
  logic [WW-1:0] ib_rdata_i, act_o;
  step_ctl_t ctl_o;
  logic [WA_W-1:0] waddr_o;
  logic [OA_W-1:0] oaddr_o;
  logic wrap_o;
  int checks = 0, failures = 0, wraps = 0;

  sps_imu dut (.*);

  // model index buffer (combinational) and input buffer (registered read)
  logic [IDX_W-1:0] kh_m [W_NUM], kw_m [W_NUM];
  assign idx_kh_i = kh_m[idx_addr_o];
  assign idx_kw_i = kw_m[idx_addr_o];
  function automatic logic [WW-1:0] ib_word(int a);
    logic [WW-1:0] v;
    for (int i = 0; i < WW; i += 32) v[i +: 32] = 32'(a * 2654435761 + i);
    return v;
  endfunction
  always_ff @(posedge clk) ib_rdata_i <= ib_word(int'(ib_raddr_o));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_addr [int];
  step_t exp_step [int];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (exp_addr.exists(cyc - 1)) begin
      checks++;
      if (int'(ib_raddr_o) != exp_addr[cyc - 1]) begin
        failures++; $display("cycle %0d: ib addr %0d want %0d", cyc, ib_raddr_o, exp_addr[cyc - 1]);
      end
    end
    if (exp_step.exists(cyc - 2)) begin
      checks++;
      if (act_o !== ib_word(exp_addr[cyc - 2]) || ctl_o !== exp_step[cyc - 2].ctl ||
          waddr_o !== exp_step[cyc - 2].waddr || oaddr_o !== exp_step[cyc - 2].oaddr) begin
        failures++; $display("cycle %0d: stage-2 outputs wrong", cyc);
      end
    end
  end

  initial begin
    rst_n = 0; step_i = '0; w_in = 8'd6; inc_p = 8'd3;
    for (int e = 0; e < W_NUM; e++) begin kh_m[e] = IDX_W'($urandom_range(0, 2)); kw_m[e] = IDX_W'($urandom_range(0, 2)); end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int raw, e, y, x;
      @(posedge clk); #1;
      step_i = '0;
      step_i.ctl.valid = 1;
      step_i.ctl.clear = 1'($urandom);
      step_i.ctl.last  = 1'($urandom);
      step_i.oh = DIM_W'($urandom_range(0, 3));
      step_i.ow = DIM_W'($urandom_range(0, 3));
      step_i.g  = DIM_W'($urandom_range(0, P - 1));
      step_i.kv = DIM_W'($urandom_range(0, P - 1));
      step_i.w  = DIM_W'($urandom_range(0, KSS - 1));
      step_i.rr = DIM_W'($urandom_range(0, 2));
      step_i.waddr = WA_W'($urandom);
      step_i.oaddr = OA_W'($urandom);
      raw = (int'(step_i.g) + int'(step_i.kv)) * KSS + int'(step_i.w);
      e = raw % W_NUM;
      #1;
      checks++;
      if (int'(idx_addr_o) != e || wrap_o != (raw >= W_NUM)) begin
        failures++; $display("index entry %0d want %0d", idx_addr_o, e);
      end
      if (wrap_o) wraps++;
      y = int'(step_i.oh) + int'(kh_m[e]);
      x = int'(step_i.ow) + int'(kw_m[e]);
      exp_addr[cyc] = ((y * 6 + x) * P + int'(step_i.kv)) * 3 + int'(step_i.rr);
      exp_step[cyc] = step_i;
    end
    @(posedge clk); #1 step_i = '0;
    repeat (4) @(posedge clk);
    checks++;
    if (wraps == 0) begin failures++; $display("modulo wrap never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
