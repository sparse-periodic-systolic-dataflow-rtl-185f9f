// Body shared by the end-to-end testbenches of sps_top. The including module
// defines the localparams PP, KS, SW, SH, the clock clk, and instantiates the
// accelerator as `dut` connected to the signals declared here.
//
// The testbench plays host and compiler. For a layer with c_in input and
// c_out output channels it
//   - draws P random 3x3 patterns of KSS nonzero positions, and for every
//     (output channel oc, input channel ic) the kernel variant
//     (oc mod P + ic mod P) mod P with random nonzero weights;
//   - computes the convolution in natural channel order (reference);
//   - packs the weights in PPW order: PE (j, i) gets, for every
//     (g, cc, kv, w, rr), the weight of oc = g + P*(cc*SH + j) and
//     ic = kv + P*(rr*SW + i), zero where oc or ic is past the layer
//     (systolic padding);
//   - writes the zero-padded input map into the input buffer, grouped as
//     the accelerator expects, and the patterns into the index buffer;
//   - optionally queues ReLU and 2x2 max pooling;
//   - runs the layer, checks the convolution cycle count and compares every
//     output channel read from the output buffer with the reference.
// A second layer can take the first layer's results straight from the
// output buffer, moving words without any channel permutation (next layer
// reordering), and is checked against a reference computed from the first
// layer's natural-order outputs.

  localparam int unsigned NUM = PP * KS;
  localparam int unsigned XAW = (NUM > 1) ? $clog2(NUM) : 1;
  localparam int unsigned RW  = (SH > 1) ? $clog2(SH) : 1;
  localparam int unsigned CW  = (SW > 1) ? $clog2(SW) : 1;
  localparam int unsigned TL  = (SW > 1) ? $clog2(SW) : 1;

  logic                        rst_n;
  sps_pkg::layer_cfg_t         cfg;
  logic                        start, busy, done;
  logic                        idx_we;
  logic [XAW-1:0]              idx_addr;
  logic [sps_pkg::IDX_W-1:0]   idx_kh, idx_kw;
  logic                        ib_we;
  logic [sps_pkg::IA_W-1:0]    ib_waddr;
  logic [SW-1:0][7:0]          ib_wdata;
  logic                        wl_we;
  logic [RW-1:0]               wl_row;
  logic [CW-1:0]               wl_col;
  logic [sps_pkg::WA_W-1:0]    wl_addr;
  logic [7:0]                  wl_data;
  logic                        iq_push, iq_full;
  sps_pkg::vinstr_t            iq_data;
  logic [sps_pkg::OA_W-1:0]    ob_raddr;
  logic [SH-1:0][31:0]         ob_rdata;

  int checks = 0, failures = 0;

  // coverage of the mechanisms the design has
  int n_wrap = 0, n_pad_w = 0, n_pad_a = 0, n_relu = 0, n_pool = 0, n_nop = 0;
  int n_nlr = 0, n_blocks = 0, n_layers = 0, n_accum = 0;

  // Input channels whose weights are loaded (others get zero weights), and
  // the accumulate bit of the next run: used to split a layer into passes.
  int  ic_lo = 0, ic_hi = 1 << 30;
  bit  L_accum = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_imu.wrap_o) n_wrap++;
    if (dut.u_ctrl.step_o.ctl.valid && dut.u_ctrl.step_o.ctl.last) n_blocks++;
    if (dut.u_vpu.iq_pop) begin
      if (dut.u_vpu.iq_head.op == sps_pkg::VOP_RELU) n_relu++;
      else if (dut.u_vpu.iq_head.op == sps_pkg::VOP_MAXPOOL) n_pool++;
      else n_nop++;
    end
  end

  // ---- layer data (natural order) ----------------------------------------
  int L_cin, L_cout, L_ho, L_wo, L_icp, L_inc, L_ocp, L_onc, L_win;
  int pat_kh [PP][KS];
  int pat_kw [PP][KS];
  int act [];    // [c][y][x] of the padded input, (L_ho+2) x (L_wo+2)
  int wgt [];    // [oc][ic][w]
  int ref_o [];  // [oc][oh][ow]

  function automatic int ai(int c, int y, int x);
    return (c * (L_ho + 2) + y) * (L_wo + 2) + x;
  endfunction
  function automatic int wi(int oc, int ic, int w);
    return (oc * L_cin + ic) * KS + w;
  endfunction
  function automatic int oi(int oc, int y, int x);
    return (oc * L_ho + y) * L_wo + x;
  endfunction
  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  task automatic set_shape(int cin, int cout, int ho, int wo);
    L_cin = cin; L_cout = cout; L_ho = ho; L_wo = wo; L_win = wo + 2;
    L_icp = ceil_div(cin, PP);  L_inc = ceil_div(L_icp, SW);
    L_ocp = ceil_div(cout, PP); L_onc = ceil_div(L_ocp, SH);
    wgt   = new[cout * cin * KS];
    ref_o = new[cout * ho * wo];
  endtask

  task automatic make_patterns();
    for (int k = 0; k < PP; k++) begin
      int cells [$];
      for (int c = 0; c < 9; c++) cells.push_back(c);
      cells.shuffle();
      for (int w = 0; w < KS; w++) begin
        pat_kh[k][w] = cells[w] / 3;
        pat_kw[k][w] = cells[w] % 3;
      end
    end
  endtask

  task automatic make_weights();
    foreach (wgt[n]) wgt[n] = $urandom_range(0, 255) - 128;
  endtask

  task automatic make_input();
    act = new[L_cin * (L_ho + 2) * (L_wo + 2)];
    foreach (act[n]) act[n] = 0;
    for (int c = 0; c < L_cin; c++)
      for (int y = 1; y <= L_ho; y++)
        for (int x = 1; x <= L_wo; x++)
          act[ai(c, y, x)] = $urandom_range(0, 255) - 128;
  endtask

  task automatic compute_ref();
    for (int oc = 0; oc < L_cout; oc++)
      for (int y = 0; y < L_ho; y++)
        for (int x = 0; x < L_wo; x++) begin
          int s;
          s = 0;
          for (int ic = 0; ic < L_cin; ic++) begin
            int kv;
            kv = ((oc % PP) + (ic % PP)) % PP;
            for (int w = 0; w < KS; w++)
              s += wgt[wi(oc, ic, w)] * act[ai(ic, y + pat_kh[kv][w], x + pat_kw[kv][w])];
          end
          ref_o[oi(oc, y, x)] = s;
        end
  endtask

  // ---- host loading ------------------------------------------------------
  task automatic load_index();
    for (int k = 0; k < PP; k++)
      for (int w = 0; w < KS; w++) begin
        @(negedge clk);
        idx_we = 1; idx_addr = XAW'(k * KS + w);
        idx_kh = sps_pkg::IDX_W'(pat_kh[k][w]); idx_kw = sps_pkg::IDX_W'(pat_kw[k][w]);
      end
    @(negedge clk); idx_we = 0;
  endtask

  // PPW packing: kernel and filter reordering plus systolic padding.
  task automatic load_weights();
    for (int j = 0; j < SH; j++)
      for (int i = 0; i < SW; i++) begin
        int a;
        a = 0;
        for (int g = 0; g < PP; g++)
          for (int cc = 0; cc < L_onc; cc++)
            for (int kv = 0; kv < PP; kv++)
              for (int w = 0; w < KS; w++)
                for (int rr = 0; rr < L_inc; rr++) begin
                  int oc, ic, v;
                  oc = g + PP * (cc * SH + j);
                  ic = kv + PP * (rr * SW + i);
                  if (oc < L_cout && ic < L_cin) v = (ic >= ic_lo && ic < ic_hi) ? wgt[wi(oc, ic, w)] : 0;
                  else begin v = 0; n_pad_w++; end
                  @(negedge clk);
                  wl_we = 1; wl_row = RW'(j); wl_col = CW'(i);
                  wl_addr = sps_pkg::WA_W'(a); wl_data = 8'(v);
                  a++;
                end
      end
    @(negedge clk); wl_we = 0;
  endtask

  // Input map in grouped order: word ((y*w_in + x)*P + kv)*INC_p + rr,
  // lane i = input channel kv + P*(rr*SW + i).
  task automatic load_input();
    for (int y = 0; y < L_ho + 2; y++)
      for (int x = 0; x < L_wo + 2; x++)
        for (int kv = 0; kv < PP; kv++)
          for (int rr = 0; rr < L_inc; rr++) begin
            @(negedge clk);
            ib_we = 1;
            ib_waddr = sps_pkg::IA_W'(((y * L_win + x) * PP + kv) * L_inc + rr);
            for (int i = 0; i < SW; i++) begin
              int ic;
              ic = kv + PP * (rr * SW + i);
              if (ic < L_cin) ib_wdata[i] = 8'(act[ai(ic, y, x)]);
              else begin ib_wdata[i] = '0; n_pad_a++; end
            end
          end
    @(negedge clk); ib_we = 0;
  endtask

  task automatic queue(sps_pkg::vop_e op, int src, int dst, int h, int w, int wpp);
    @(negedge clk);
    iq_push = 1;
    iq_data = '0;
    iq_data.op = op; iq_data.src = 16'(src); iq_data.dst = 16'(dst);
    iq_data.height = 8'(h); iq_data.width = 8'(w); iq_data.wpp = 8'(wpp);
    @(negedge clk); iq_push = 0;
  endtask

  // Start the layer; check the convolution takes exactly steps + drain.
  task automatic run_layer();
    int t, steps, want;
    cfg = '0;
    cfg.h_out = 8'(L_ho); cfg.w_out = 8'(L_wo); cfg.w_in = 8'(L_win);
    cfg.inc_p = 8'(L_inc); cfg.onc_p = 8'(L_onc); cfg.accum = L_accum;
    steps = L_ho * L_wo * PP * L_onc * PP * KS * L_inc;
    want  = steps + SH + TL + 5;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t = 0;
    while (!dut.u_ctrl.done && t < want + 100) begin @(negedge clk); t++; end
    checks++;
    if (t != want) begin failures++; $display("convolution took %0d cycles, want %0d", t, want); end
    else $display("layer %0dx%0dx%0d -> %0d: %0d steps, %0d cycles", L_ho, L_wo, L_cin, L_cout, steps, t);
    while (!done && t < want + 100000) begin @(negedge clk); t++; end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end
    n_layers++;
  endtask

  // Read output word; data comes one cycle after the address.
  task automatic read_word(int a, output logic [SH-1:0][31:0] d);
    ob_raddr = sps_pkg::OA_W'(a);
    @(posedge clk); #1;
    d = ob_rdata;
    @(negedge clk);
  endtask

  // Compare the output buffer (region starting at word base, map ho x wo)
  // with expected natural-order values exp_v[oc][y][x].
  task automatic check_outputs(int base, int ho, int wo, ref int exp_v []);
    int errs;
    errs = 0;
    for (int pix = 0; pix < ho * wo; pix++)
      for (int g = 0; g < PP; g++)
        for (int cc = 0; cc < L_onc; cc++) begin
          logic [SH-1:0][31:0] d;
          read_word(base + (pix * PP + g) * L_onc + cc, d);
          for (int j = 0; j < SH; j++) begin
            int oc;
            oc = g + PP * (cc * SH + j);
            if (oc < L_cout) begin
              checks++;
              if (int'(d[j]) != exp_v[(oc * ho + pix / wo) * wo + pix % wo]) begin
                failures++; errs++;
                if (errs < 6) $display("pixel %0d channel %0d: got %0d want %0d", pix, oc, int'(d[j]),
                                       exp_v[(oc * ho + pix / wo) * wo + pix % wo]);
              end
            end
          end
        end
  endtask

  task automatic reset_dut();
    rst_n = 0; start = 0; cfg = '0; idx_we = 0; idx_addr = '0; idx_kh = '0; idx_kw = '0;
    ib_we = 0; ib_waddr = '0; ib_wdata = '0; wl_we = 0; wl_row = '0; wl_col = '0;
    wl_addr = '0; wl_data = '0; iq_push = 0; iq_data = '0; ob_raddr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
  endtask

  // Queue the optional ReLU (in place) and 2x2 max pooling (to the words
  // right after the layer), run the layer and check every stage against the
  // reference in ref_o.
  task automatic run_and_check(bit relu, bit pool);
    int words, wpp;
    int exp_v [];
    wpp = PP * L_onc;
    words = L_ho * L_wo * wpp;
    exp_v = new[ref_o.size()];
    foreach (ref_o[n]) exp_v[n] = (relu && ref_o[n] < 0) ? 0 : ref_o[n];
    if (relu) queue(sps_pkg::VOP_RELU, 0, 0, L_ho, L_wo, wpp);
    if (pool) queue(sps_pkg::VOP_MAXPOOL, 0, words, L_ho, L_wo, wpp);
    run_layer();
    check_outputs(0, L_ho, L_wo, exp_v);
    if (pool) begin
      int pv [];
      pv = new[L_cout * (L_ho / 2) * (L_wo / 2)];
      for (int oc = 0; oc < L_cout; oc++)
        for (int y = 0; y < L_ho / 2; y++)
          for (int x = 0; x < L_wo / 2; x++) begin
            int m;
            m = exp_v[oi(oc, 2 * y, 2 * x)];
            for (int d = 1; d < 4; d++)
              if (exp_v[oi(oc, 2 * y + d / 2, 2 * x + d % 2)] > m) m = exp_v[oi(oc, 2 * y + d / 2, 2 * x + d % 2)];
            pv[(oc * (L_ho / 2) + y) * (L_wo / 2) + x] = m;
          end
      check_outputs(words, L_ho / 2, L_wo / 2, pv);
    end
  endtask

  // One layer with random data.
  task automatic layer_test(int cin, int cout, int ho, int wo, bit relu, bit pool);
    set_shape(cin, cout, ho, wo);
    make_patterns(); make_weights(); make_input(); compute_ref();
    load_index(); load_weights(); load_input();
    run_and_check(relu, pool);
  endtask

  // One layer in two passes over the same input map: the first pass carries
  // the weights of input channels below cin/2 and writes its sums, the
  // second the rest and adds its sums to the output buffer (cfg.accum). The
  // result must equal the whole convolution; the vector operations follow
  // the second pass.
  task automatic accum_layer_test(int cin, int cout, int ho, int wo, bit relu, bit pool);
    set_shape(cin, cout, ho, wo);
    make_patterns(); make_weights(); make_input(); compute_ref();
    load_index(); load_input();
    ic_lo = 0; ic_hi = cin / 2; L_accum = 1'b0;
    load_weights();
    run_layer();
    ic_lo = cin / 2; ic_hi = cin; L_accum = 1'b1;
    load_weights();
    run_and_check(relu, pool);
    ic_lo = 0; ic_hi = 1 << 30; L_accum = 1'b0;
    n_accum++;
  endtask

  // Next layer: c_out2 filters over the previous layer's outputs, read from
  // the output buffer in the grouped order it holds them and written to the
  // input buffer without sorting channels: slot s of group g in the output
  // (ONC_p*SH slots) becomes slot s of input group g (INC_p*SW slots); slots
  // past either end are padding and hold zero. Activations are requantised
  // as min(max(x,0) >> 6, 127). With from_pool the source is the previous
  // layer's pooled map (that layer must have run with pooling), so the next
  // layer works on half the map size. relu and pool apply to the new layer.
  task automatic next_layer_test(int cout2, bit from_pool = 1'b0, bit relu = 1'b0, bit pool = 1'b0);
    int prev_cout, prev_onc, ho, wo, slots, base;
    int nat [];
    prev_cout = L_cout; prev_onc = L_onc;
    ho = from_pool ? L_ho / 2 : L_ho;
    wo = from_pool ? L_wo / 2 : L_wo;
    base = from_pool ? L_ho * L_wo * PP * L_onc : 0;
    slots = prev_onc * SH;
    // natural-order requantised activations for the reference; requantising
    // is monotonic, so pooling before or after it gives the same values
    nat = new[prev_cout * (ho + 2) * (wo + 2)];
    foreach (nat[n]) nat[n] = 0;
    for (int oc = 0; oc < prev_cout; oc++)
      for (int y = 0; y < ho; y++)
        for (int x = 0; x < wo; x++) begin
          int v;
          if (from_pool) begin
            v = ref_o[oi(oc, 2 * y, 2 * x)];
            for (int d = 1; d < 4; d++)
              if (ref_o[oi(oc, 2 * y + d / 2, 2 * x + d % 2)] > v) v = ref_o[oi(oc, 2 * y + d / 2, 2 * x + d % 2)];
          end else v = ref_o[oi(oc, y, x)];
          v = (v < 0) ? 0 : (v >>> 6);
          if (v > 127) v = 127;
          nat[(oc * (ho + 2) + y + 1) * (wo + 2) + x + 1] = v;
        end
    set_shape(prev_cout, cout2, ho, wo);
    // every real channel of a group must have a slot in the next layer
    checks++;
    if (L_inc * SW < L_icp) begin
      failures++; $display("next layer has fewer channel slots than channels");
      return;
    end
    // clear the padded input map, then move words group by group
    for (int y = 0; y < ho + 2; y++)
      for (int x = 0; x < wo + 2; x++)
        for (int kv = 0; kv < PP; kv++)
          for (int rr = 0; rr < L_inc; rr++) begin
            @(negedge clk);
            ib_we = 1; ib_waddr = sps_pkg::IA_W'(((y * L_win + x) * PP + kv) * L_inc + rr); ib_wdata = '0;
          end
    @(negedge clk); ib_we = 0;
    for (int pix = 0; pix < ho * wo; pix++)
      for (int g = 0; g < PP; g++) begin
        logic [7:0] lanes [];
        lanes = new[slots];
        for (int cc = 0; cc < prev_onc; cc++) begin
          logic [SH-1:0][31:0] d;
          read_word(base + (pix * PP + g) * prev_onc + cc, d);
          for (int j = 0; j < SH; j++) begin
            int v;
            v = int'(d[j]);
            v = (v < 0) ? 0 : (v >>> 6);
            if (v > 127) v = 127;
            lanes[cc * SH + j] = 8'(v);
          end
        end
        for (int rr = 0; rr < L_inc; rr++) begin
          @(negedge clk);
          ib_we = 1;
          ib_waddr = sps_pkg::IA_W'((((pix / wo + 1) * L_win + pix % wo + 1) * PP + g) * L_inc + rr);
          for (int i = 0; i < SW; i++)
            ib_wdata[i] = (rr * SW + i < slots) ? lanes[rr * SW + i] : 8'd0;
        end
        @(negedge clk); ib_we = 0;
      end
    act = nat;
    make_patterns(); make_weights(); compute_ref();
    load_index(); load_weights();
    run_and_check(relu, pool);
    n_nlr++;
  endtask

  task automatic coverage_report();
    $display("coverage: layers %0d, blocks %0d, index wraps %0d, padded weights %0d, padded activations %0d, relu %0d, maxpool %0d, nop %0d, next-layer hand-overs %0d, accumulating layers %0d",
             n_layers, n_blocks, n_wrap, n_pad_w, n_pad_a, n_relu, n_pool, n_nop, n_nlr, n_accum);
  endtask
