// Testbench for sps_output_buffer: per-bank writes at different addresses in
// the same cycle, whole-word writes, the priority of a bank write over a word
// write, and the one-cycle registered read with one address per bank, all
// against a model.
module tb_sps_output_buffer;
  import sps_pkg::*;
  localparam int unsigned NB = 4;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned XW = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [NB-1:0] bwe;
  logic [NB-1:0][XW-1:0] bwaddr;
  logic [NB-1:0][31:0] bwdata, vwdata, rdata;
  logic vwe;
  logic [XW-1:0] vwaddr;
  logic [NB-1:0][XW-1:0] raddr;
  logic [31:0] model [NB][DEPTH];
  int checks = 0, failures = 0;

  sps_output_buffer #(.NB(NB), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Bank j reads word (a + j*skew) mod DEPTH.
  task automatic check_word(int a, int skew);
    int wa [NB];
    for (int j = 0; j < NB; j++) begin
      wa[j] = (a + j * skew) % DEPTH;
      raddr[j] = XW'(wa[j]);
    end
    @(posedge clk); #1;
    for (int j = 0; j < NB; j++) begin
      checks++;
      if (rdata[j] !== model[j][wa[j]]) begin
        failures++; $display("bank %0d addr %0d: got %0h want %0h", j, wa[j], rdata[j], model[j][wa[j]]);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    bwe = 0; vwe = 0; bwaddr = '0; bwdata = '0; vwaddr = 0; vwdata = '0; raddr = '0;
    // fill with word writes
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      vwe = 1; vwaddr = XW'(a);
      for (int j = 0; j < NB; j++) begin vwdata[j] = $urandom; model[j][a] = vwdata[j]; end
    end
    @(negedge clk); vwe = 0;
    // bank writes, each bank its own address
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      for (int j = 0; j < NB; j++) begin
        bwe[j] = $urandom_range(0, 1);
        bwaddr[j] = XW'($urandom_range(0, DEPTH - 1));
        bwdata[j] = $urandom;
      end
      // sometimes a word write in the same cycle: banks not written by bwe take it
      vwe = (n % 5 == 0);
      vwaddr = XW'($urandom_range(0, DEPTH - 1));
      for (int j = 0; j < NB; j++) vwdata[j] = $urandom;
      for (int j = 0; j < NB; j++) begin
        if (bwe[j]) model[j][bwaddr[j]] = bwdata[j];
        else if (vwe) model[j][vwaddr] = vwdata[j];
      end
    end
    @(negedge clk); bwe = 0; vwe = 0;
    for (int a = 0; a < DEPTH; a++) check_word(a, 0);
    for (int a = 0; a < DEPTH; a++) check_word(a, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
