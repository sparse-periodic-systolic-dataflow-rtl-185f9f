// Testbench for sps_index_buffer: loads all W_NUM entries with random kernel
// coordinates, reads every entry back (combinational read) and compares with
// a model array; then rewrites part of it and checks again.
module tb_sps_index_buffer;
  import sps_pkg::*;
  localparam int unsigned NUM = W_NUM;
  localparam int unsigned AW  = $clog2(NUM);

  logic clk = 0;
  always #5 clk = ~clk;

  logic          wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [IDX_W-1:0] wr_kh, wr_kw, rd_kh, rd_kw;
  logic [IDX_W-1:0] m_kh [NUM], m_kw [NUM];
  int checks = 0, failures = 0;

  sps_index_buffer dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a, int kh, int kw);
    @(negedge clk);
    wr_en = 1; wr_addr = AW'(a); wr_kh = IDX_W'(kh); wr_kw = IDX_W'(kw);
    m_kh[a] = IDX_W'(kh); m_kw[a] = IDX_W'(kw);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_all();
    for (int a = 0; a < NUM; a++) begin
      rd_addr = AW'(a);
      #1;
      checks++;
      if (rd_kh !== m_kh[a] || rd_kw !== m_kw[a]) begin
        failures++;
        $display("entry %0d: got (%0d,%0d) want (%0d,%0d)", a, rd_kh, rd_kw, m_kh[a], m_kw[a]);
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_addr = 0; wr_kh = 0; wr_kw = 0; rd_addr = 0;
    for (int a = 0; a < NUM; a++) write(a, $urandom_range(0, 2), $urandom_range(0, 2));
    check_all();
    for (int a = 0; a < NUM; a += 3) write(a, $urandom_range(0, 3), $urandom_range(0, 3));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
