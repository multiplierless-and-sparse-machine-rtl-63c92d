// tb_mp_neuron: self-checking test of the differential MP neuron.
//
// Random inputs, weights, biases and gammas are applied to a 2-input neuron
// (the perceptron and hidden-layer size) and a 30-input neuron (the output
// layer of the MLP). z+, z-, z, p+, p-, the active-score flags and counts and
// the output-node flags are compared with the reference model; the
// p+ + p- = 1 normalisation and the 2*DW+6 cycle latency are checked too.
`timescale 1ns/1ps
module tb_mp_neuron;
  import mp_ref_pkg::*;

  localparam int DW = 9;
  localparam int ONE = 16;
  localparam int PMAX = 255;
  localparam int LAT = 2 * DW + 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // ---------------- two instances ----------------
  `define NEURON_INST(NN, SUF) \
    logic start``SUF = 0, busy``SUF, done``SUF; \
    logic signed [DW-1:0] ap``SUF [NN], an``SUF [NN], wp``SUF [NN], wn``SUF [NN]; \
    logic signed [DW-1:0] bp``SUF, bn``SUF, pp``SUF, pn``SUF; \
    logic [DW-1:0] g``SUF; \
    logic signed [DW+1:0] zp``SUF, zn``SUF; \
    logic signed [DW+2:0] z``SUF; \
    logic [2*NN:0] actp``SUF, actn``SUF; \
    logic [$clog2(2*NN+2)-1:0] cp``SUF, cn``SUF; \
    logic [1:0] ak``SUF; \
    mp_neuron #(.N(NN), .DW(DW)) dut``SUF (.clk, .rst_n, .start(start``SUF), \
      .a_p(ap``SUF), .a_n(an``SUF), .w_p(wp``SUF), .w_n(wn``SUF), .b_p(bp``SUF), .b_n(bn``SUF), \
      .gamma(g``SUF), .busy(busy``SUF), .done(done``SUF), .p_p(pp``SUF), .p_n(pn``SUF), \
      .z_p(zp``SUF), .z_n(zn``SUF), .z(z``SUF), .act_p(actp``SUF), .act_n(actn``SUF), \
      .cnt_p(cp``SUF), .cnt_n(cn``SUF), .act_k(ak``SUF));

  `NEURON_INST(2, _a)
  `NEURON_INST(30, _b)

  task automatic run_a(input int range_w);
    int qa[$], qn[$], qwp[$], qwn[$]; int g, cyc; neuron_t r;
    qa = {}; qn = {}; qwp = {}; qwn = {};
    for (int i = 0; i < 2; i++) begin
      ap_a[i] = DW'(rnd(-64, 64)); an_a[i] = DW'(rnd(-64, 64));
      wp_a[i] = DW'(rnd(-range_w, range_w)); wn_a[i] = DW'(rnd(-range_w, range_w));
      qa.push_back(int'(ap_a[i])); qn.push_back(int'(an_a[i]));
      qwp.push_back(int'(wp_a[i])); qwn.push_back(int'(wn_a[i]));
    end
    bp_a = DW'(rnd(-100, 100)); bn_a = DW'(rnd(-100, 100));
    g = rnd(1, 80); g_a = DW'(g);
    @(negedge clk) start_a = 1;
    @(negedge clk) start_a = 0;
    cyc = 0;
    while (!done_a) begin @(negedge clk); cyc++; end
    r = neuron_ref(qa, qn, qwp, qwn, int'(bp_a), int'(bn_a), g, ONE, PMAX);
    check("latency", cyc, LAT);
    check("zp", int'(zp_a), r.zp);
    check("zn", int'(zn_a), r.zn);
    check("z", int'(z_a), r.z);
    check("pp", int'(pp_a), r.pp);
    check("pn", int'(pn_a), r.pn);
    check("cnt_p", int'(cp_a), r.ap);
    check("cnt_n", int'(cn_a), r.an);
    check("act_k count", int'(ak_a[0]) + int'(ak_a[1]), r.ak);
    for (int k = 0; k < 5; k++) begin
      check("act_p", int'(actp_a[k]), int'(r.lp[k] > r.zp));
      check("act_n", int'(actn_a[k]), int'(r.ln[k] > r.zn));
    end
    // normalisation p+ + p- within [1, 1 + 2 LSB]
    checks++;
    if (pp_a + pn_a < ONE || pp_a + pn_a > ONE + 2) begin
      failures++; $display("FAIL normalisation %0d + %0d", pp_a, pn_a);
    end
  endtask

  task automatic run_b;
    int qa[$], qn[$], qwp[$], qwn[$]; int g; neuron_t r;
    qa = {}; qn = {}; qwp = {}; qwn = {};
    for (int i = 0; i < 30; i++) begin
      ap_b[i] = DW'(rnd(0, 16)); an_b[i] = DW'(16 - int'(ap_b[i]));
      wp_b[i] = DW'(rnd(-120, 120)); wn_b[i] = DW'(rnd(-120, 120));
      qa.push_back(int'(ap_b[i])); qn.push_back(int'(an_b[i]));
      qwp.push_back(int'(wp_b[i])); qwn.push_back(int'(wn_b[i]));
    end
    bp_b = DW'(rnd(-100, 100)); bn_b = DW'(rnd(-100, 100));
    g = rnd(1, 255); g_b = DW'(g);
    @(negedge clk) start_b = 1;
    @(negedge clk) start_b = 0;
    wait (done_b); @(negedge clk);
    r = neuron_ref(qa, qn, qwp, qwn, int'(bp_b), int'(bn_b), g, ONE, PMAX);
    check("zp30", int'(zp_b), r.zp);
    check("zn30", int'(zn_b), r.zn);
    check("z30", int'(z_b), r.z);
    check("pp30", int'(pp_b), r.pp);
    check("pn30", int'(pn_b), r.pn);
    check("cnt_p30", int'(cp_b), r.ap);
    check("cnt_n30", int'(cn_b), r.an);
  endtask

  initial begin
    foreach (ap_a[i]) begin ap_a[i] = 0; an_a[i] = 0; wp_a[i] = 0; wn_a[i] = 0; end
    foreach (ap_b[i]) begin ap_b[i] = 0; an_b[i] = 0; wp_b[i] = 0; wn_b[i] = 0; end
    bp_a = 0; bn_a = 0; bp_b = 0; bn_b = 0; g_a = 16; g_b = 16;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) run_a(t < 150 ? 40 : 200);
    for (int t = 0; t < 60; t++) run_b();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
