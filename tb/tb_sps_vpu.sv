// Testbench for sps_vpu with 4 lanes: a model output buffer (registered read)
// and a model instruction queue surround the unit. It runs ReLU over a range,
// a NOP, and 2x2 max pooling of a 4x6 map with 3 words per pixel, then checks
// every word of the buffer against results computed in the testbench, and
// the number of cycles each instruction takes.
module tb_sps_vpu;
  import sps_pkg::*;
  localparam int unsigned NL = 4, XW = 12, MEM = 256;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, enable, iq_empty, iq_pop, ob_we, busy;
  vinstr_t iq_head;
  logic [XW-1:0] ob_raddr, ob_waddr;
  logic [NL-1:0][31:0] ob_rdata, ob_wdata;
  logic [NL-1:0][31:0] mem [MEM];
  logic [NL-1:0][31:0] ref_m [MEM];
  vinstr_t q [$];
  int checks = 0, failures = 0;

  sps_vpu #(.NL(NL), .XW(XW)) dut (.*);

  always_ff @(posedge clk) begin
    ob_rdata <= mem[ob_raddr];
    if (ob_we) mem[ob_waddr] <= ob_wdata;
  end
  assign iq_empty = (q.size() == 0);
  assign iq_head  = iq_empty ? '0 : q[0];
  always @(posedge clk) if (iq_pop) void'(q.pop_front());

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vinstr_t mk(vop_e op, int src, int dst, int h, int w, int wpp);
    vinstr_t v;
    v.op = op; v.src = 16'(src); v.dst = 16'(dst);
    v.height = 8'(h); v.width = 8'(w); v.wpp = 8'(wpp);
    return v;
  endfunction

  task automatic run_one(vinstr_t v, int want_cycles);
    int t = 0;
    q.push_back(v);
    @(negedge clk);
    while (!(iq_empty && !busy) && t < 1000) begin @(negedge clk); t++; end
    checks++;
    if (t != want_cycles) begin failures++; $display("op %0d took %0d cycles, want %0d", v.op, t, want_cycles); end
  endtask

  initial begin
    rst_n = 0; enable = 0;
    for (int a = 0; a < MEM; a++)
      for (int l = 0; l < NL; l++) begin
        mem[a][l] = $urandom_range(0, 2000) - 1000;
        ref_m[a][l] = mem[a][l];
      end
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1; enable = 1;
    // ReLU words 10..39 into 100..129 (h=1, w=10, wpp=3 -> 30 words)
    for (int k = 0; k < 30; k++)
      for (int l = 0; l < NL; l++)
        ref_m[100 + k][l] = ($signed(ref_m[10 + k][l]) < 0) ? 0 : ref_m[10 + k][l];
    run_one(mk(VOP_RELU, 10, 100, 1, 10, 3), 30 + 1);
    run_one(mk(VOP_NOP, 0, 0, 0, 0, 0), 0);
    // max pool 4x6 map, 3 words per pixel, from word 140 to word 220
    for (int py = 0; py < 2; py++)
      for (int px = 0; px < 3; px++)
        for (int k = 0; k < 3; k++)
          for (int l = 0; l < NL; l++) begin
            int m, v;
            m = -2147483647;
            for (int d = 0; d < 4; d++) begin
              v = int'(ref_m[140 + ((2 * py + d / 2) * 6 + 2 * px + d % 2) * 3 + k][l]);
              if (v > m) m = v;
            end
            ref_m[220 + (py * 3 + px) * 3 + k][l] = 32'(m);
          end
    run_one(mk(VOP_MAXPOOL, 140, 220, 4, 6, 3), 4 * 18 + 1);
    for (int a = 0; a < MEM; a++) begin
      checks++;
      if (mem[a] !== ref_m[a]) begin failures++; $display("word %0d mismatch %0d %0d", a, int'(mem[a][0]), int'(ref_m[a][0])); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
