// Testbench for sps_input_buffer: writes random words at random addresses,
// reads them back and checks the one-cycle read latency against a model.
module tb_sps_input_buffer;
  import sps_pkg::*;
  localparam int unsigned DEPTH = IBUF_DEPTH;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned WW = SYS_W * DATA_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [WW-1:0] wdata, rdata;
  logic [WW-1:0] model [int];
  int addrs [64];
  int checks = 0, failures = 0;

  sps_input_buffer dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WW-1:0] rnd();
    logic [WW-1:0] v;
    for (int i = 0; i < WW; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int n = 0; n < 64; n++) begin
      addrs[n] = (n == 0) ? 0 : (n == 1) ? DEPTH - 1 : int'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      we = 1; waddr = AW'(addrs[n]); wdata = rnd();
      model[addrs[n]] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 64; n++) begin
      raddr = AW'(addrs[n]);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[addrs[n]]) begin
        failures++;
        $display("addr %0d mismatch", addrs[n]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
