// Testbench for sps_weight_bram: fills part of the memory, reads back with
// re high (data one cycle later) and checks that the output holds its value
// while re is low.
module tb_sps_weight_bram;
  import sps_pkg::*;
  localparam int unsigned DEPTH = WBRAM_DEPTH;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [DATA_W-1:0] wdata, rdata;
  logic [DATA_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sps_weight_bram dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a * 7 + 3); wdata = DATA_W'($urandom);
      model[a * 7 + 3] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int a = 0; a < 256; a++) begin
      re = 1; raddr = AW'(a * 7 + 3);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a * 7 + 3]) begin
        failures++;
        $display("addr %0d: got %0h want %0h", a * 7 + 3, rdata, model[a * 7 + 3]);
      end
      @(negedge clk);
    end
    // read disabled: output must hold
    held = rdata;
    re = 0; raddr = AW'(3);
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (rdata !== held) begin failures++; $display("output changed with re low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
