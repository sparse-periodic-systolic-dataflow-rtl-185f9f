// Testbench for sps_controller: for two layer shapes it compares every issued
// step (indices, clear, last, weight and output address) with the loop nest
// written out in the testbench, and checks that done comes exactly
// steps + DRAIN cycles after start with no idle cycle between steps.
module tb_sps_controller;
  import sps_pkg::*;
  localparam int unsigned DRAIN = 9;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  layer_cfg_t cfg;
  step_t step_o;
  int checks = 0, failures = 0;

  sps_controller #(.DRAIN(DRAIN)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int ho, int wo, int inc, int onc);
    int nsteps, t, errs, blk;
    cfg = '0;
    cfg.h_out = DIM_W'(ho); cfg.w_out = DIM_W'(wo); cfg.w_in = DIM_W'(wo + 2);
    cfg.inc_p = DIM_W'(inc); cfg.onc_p = DIM_W'(onc);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    nsteps = 0; errs = 0; blk = 0;
    for (int oh = 0; oh < ho; oh++)
      for (int ow = 0; ow < wo; ow++) begin
        int wa;
        wa = 0;
        for (int g = 0; g < P; g++)
          for (int cc = 0; cc < onc; cc++) begin
            for (int kv = 0; kv < P; kv++)
              for (int w = 0; w < KSS; w++)
                for (int rr = 0; rr < inc; rr++) begin
                  bit cl, la;
                  cl = (kv == 0 && w == 0 && rr == 0);
                  la = (kv == P - 1 && w == KSS - 1 && rr == inc - 1);
                  checks++;
                  if (!step_o.ctl.valid || step_o.ctl.clear != cl || step_o.ctl.last != la ||
                      step_o.oh != oh || step_o.ow != ow || step_o.g != g || step_o.kv != kv ||
                      step_o.w != w || step_o.rr != rr || step_o.waddr != WA_W'(wa) ||
                      step_o.oaddr != OA_W'(blk)) begin
                    failures++; errs++;
                    if (errs < 5) $display("step %0d mismatch (oh %0d ow %0d g %0d cc %0d kv %0d w %0d rr %0d)",
                                           nsteps, oh, ow, g, cc, kv, w, rr);
                  end
                  wa++; nsteps++;
                  @(negedge clk);
                end
            blk++;
          end
      end
    // no more valid steps; done after DRAIN cycles in total from the last step
    t = nsteps;
    while (!done && t < nsteps + DRAIN + 10) begin
      checks++;
      if (step_o.ctl.valid) begin failures++; $display("valid step after the layer"); end
      @(negedge clk); t++;
    end
    checks++;
    if (!done || t != nsteps + DRAIN) begin
      failures++; $display("done at %0d, want %0d", t, nsteps + DRAIN);
    end
    @(negedge clk);
    checks++;
    if (busy || done) begin failures++; $display("not idle after done"); end
  endtask

  initial begin
    rst_n = 0; start = 0; cfg = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    run(2, 3, 2, 2);
    run(1, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
