// tb_mp_top: end-to-end test of the MP classifier top at its default size
// (I = 2 inputs, J = 30 hidden neurons, S = 100 support vectors).
//
// Loads random MLP, SVM and perceptron parameters and gammas through the
// configuration port, then:
//   * checks perceptron, MLP and SVM inference against the reference models,
//   * trains the perceptron and the MLP repeatedly on one sample (chosen with
//     both outputs non-zero, where the gradient is not gated off) and checks
//     that the L1 error of that sample does not grow and that updates occur,
//   * checks that a start and a configuration write issued while busy are
//     ignored,
//   * checks the latency of every operation.
// Each mechanism is counted; one that never happened is a failure.
`timescale 1ns/1ps
module tb_mp_top;
  import mp_ref_pkg::*;
  import mp_pkg::*;

  localparam int I = 2, J = 30, S = 100, DWT = 9;
  localparam int ONE_I = 16, PMAX = 255;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_perc = 0, n_perc_train = 0, n_mlp = 0, n_mlp_train = 0, n_svm = 0;
  int n_upd = 0, n_busy_start = 0, n_busy_cfg = 0;

  logic cfg_we = 0; cfg_sel_e cfg_sel = SEL_CTRL; logic [15:0] cfg_idx = 0;
  logic signed [DWT-1:0] cfg_data = 0;
  logic start = 0; op_e op = OP_PERC_INFER; logic y_pos = 0;
  logic signed [DWT-1:0] x_p [I], x_n [I], k_p [S], k_n [S];
  logic busy, done, cls, upd;
  logic signed [DWT-1:0] out_p, out_n;
  logic signed [DWT+2:0] svm_f;

  mp_top dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_idx, .cfg_data, .start, .op,
    .x_p, .x_n, .y_pos, .k_p, .k_n, .busy, .done, .cls, .out_p, .out_n, .svm_f, .upd);

  // parameters as loaded
  int wij_p [J][I], wij_n [J][I], bj_p [J], bj_n [J], wjk_p [J], wjk_n [J];
  int bk_p, bk_n, ws_p [S], ws_n [S], pw_p [I], pw_n [I], pb_p, pb_n;
  int g_perc, g_j, g_k, g_svm;

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

  task automatic cfg(input cfg_sel_e sel, input int idx, input int val);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_idx = 16'(idx); cfg_data = DWT'(val);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Issue an operation; returns cycles to done and whether upd was seen.
  task automatic run(input op_e o, input int y, output int cyc, output bit u);
    op = o; y_pos = 1'(y);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin
      @(negedge clk); cyc++;
      // once per operation: a second start and a write while busy
      if (cyc == 3) begin
        start = 1; op = OP_SVM;
        cfg_we = 1; cfg_sel = SEL_CTRL; cfg_idx = 16'd0; cfg_data = DWT'(g_perc + 7);
        @(negedge clk); cyc++;
        start = 0; cfg_we = 0; op = o;
        if (!done) begin n_busy_start++; n_busy_cfg++; end
      end
    end
    u = upd;
  endtask

  function automatic neuron_t perc_ref();
    int qa[$], qn[$], wp[$], wn[$];
    for (int i = 0; i < I; i++) begin
      qa.push_back(int'(x_p[i])); qn.push_back(int'(x_n[i]));
      wp.push_back(pw_p[i]); wn.push_back(pw_n[i]);
    end
    return neuron_ref(qa, qn, wp, wn, pb_p, pb_n, g_perc, ONE_I, PMAX);
  endfunction

  function automatic neuron_t mlp_ref();
    int qa[$], qn[$], wp[$], wn[$], hp[$], hn[$], op_[$], on_[$];
    neuron_t r;
    for (int i = 0; i < I; i++) begin
      qa.push_back(int'(x_p[i])); qn.push_back(int'(x_n[i]));
    end
    for (int j = 0; j < J; j++) begin
      wp = {}; wn = {};
      for (int i = 0; i < I; i++) begin wp.push_back(wij_p[j][i]); wn.push_back(wij_n[j][i]); end
      r = neuron_ref(qa, qn, wp, wn, bj_p[j], bj_n[j], g_j, ONE_I, PMAX);
      hp.push_back(r.pp); hn.push_back(r.pn);
      op_.push_back(wjk_p[j]); on_.push_back(wjk_n[j]);
    end
    return neuron_ref(hp, hn, op_, on_, bk_p, bk_n, g_k, ONE_I, PMAX);
  endfunction

  task automatic random_x;
    for (int i = 0; i < I; i++) begin
      x_p[i] = DWT'(rnd(-40, 40)); x_n[i] = DWT'(rnd(-40, 40));
    end
  endtask

  initial begin
    int cyc, e0, e1, y, rp, rn;
    bit u;
    neuron_t r;
    foreach (x_p[i]) begin x_p[i] = 0; x_n[i] = 0; end
    foreach (k_p[s]) begin k_p[s] = 0; k_n[s] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- configuration ----
    g_perc = 20; g_j = 24; g_k = 40; g_svm = 30;
    cfg(SEL_CTRL, 0, g_perc); cfg(SEL_CTRL, 1, g_j); cfg(SEL_CTRL, 2, g_k);
    cfg(SEL_CTRL, 3, g_svm); cfg(SEL_CTRL, 4, 1);
    for (int j = 0; j < J; j++) begin
      for (int i = 0; i < I; i++) begin
        wij_p[j][i] = rnd(-40, 40); cfg(SEL_WIJ_P, (j << 8) | i, wij_p[j][i]);
        wij_n[j][i] = rnd(-40, 40); cfg(SEL_WIJ_N, (j << 8) | i, wij_n[j][i]);
      end
      bj_p[j] = rnd(-40, 40);  cfg(SEL_BJ_P, j, bj_p[j]);
      bj_n[j] = rnd(-40, 40);  cfg(SEL_BJ_N, j, bj_n[j]);
      wjk_p[j] = rnd(-30, 30); cfg(SEL_WJK_P, j, wjk_p[j]);
      wjk_n[j] = rnd(-30, 30); cfg(SEL_WJK_N, j, wjk_n[j]);
    end
    bk_p = rnd(-30, 30); cfg(SEL_BK, 0, bk_p);
    bk_n = rnd(-30, 30); cfg(SEL_BK, 1, bk_n);
    for (int s = 0; s < S; s++) begin
      ws_p[s] = rnd(-60, 60); cfg(SEL_WS_P, s, ws_p[s]);
      ws_n[s] = rnd(-60, 60); cfg(SEL_WS_N, s, ws_n[s]);
    end
    for (int i = 0; i < I; i++) begin
      pw_p[i] = rnd(-40, 40); cfg(SEL_PW_P, i, pw_p[i]);
      pw_n[i] = rnd(-40, 40); cfg(SEL_PW_N, i, pw_n[i]);
    end
    pb_p = rnd(-40, 40); cfg(SEL_PB, 0, pb_p);
    pb_n = rnd(-40, 40); cfg(SEL_PB, 1, pb_n);

    // ---- inference ----
    for (int t = 0; t < 20; t++) begin
      random_x();
      run(OP_PERC_INFER, 0, cyc, u);
      r = perc_ref();
      check("perc latency", cyc, 2 * DWT + 7);
      check("perc p+", int'(out_p), r.pp); check("perc p-", int'(out_n), r.pn);
      check("perc cls", int'(cls), int'(r.pp > r.pn));
      n_perc++;

      random_x();
      run(OP_MLP, 0, cyc, u);
      r = mlp_ref();
      check("mlp latency", cyc, 4 * DWT + 14);
      check("mlp p+", int'(out_p), r.pp); check("mlp p-", int'(out_n), r.pn);
      check("mlp cls", int'(cls), int'(r.pp > r.pn));
      n_mlp++;

      begin
        int lp[$], ln[$];
        lp = {}; ln = {};
        for (int s = 0; s < S; s++) begin
          k_p[s] = DWT'(rnd(-80, 10)); k_n[s] = DWT'(rnd(-80, 10));
        end
        for (int s = 0; s < S; s++) lp.push_back(ws_p[s] + int'(k_p[s]));
        for (int s = 0; s < S; s++) lp.push_back(ws_n[s] + int'(k_n[s]));
        for (int s = 0; s < S; s++) ln.push_back(ws_p[s] + int'(k_n[s]));
        for (int s = 0; s < S; s++) ln.push_back(ws_n[s] + int'(k_p[s]));
        rp = mp_ref(lp, g_svm); rn = mp_ref(ln, g_svm);
      end
      run(OP_SVM, 0, cyc, u);
      check("svm latency", cyc, DWT + 2);
      check("svm f", int'(svm_f), rp - rn);
      if (int'(svm_f) != rp - rn) $display("  rp=%0d rn=%0d lf_p=%0d lf_n=%0d g=%0d", rp, rn, dut.lf_p, dut.lf_n, dut.gamma_svm);
      check("svm cls", int'(cls), int'(rp > rn));
      n_svm++;
    end

    // ---- perceptron training on one sample ----
    // pick a sample off the dead zone: with p+ or p- at zero the node's
    // normaliser has A = 1 and the rule's factor (1-1/A) stops all learning
    for (int tries = 0; tries < 200; tries++) begin
      random_x();
      run(OP_PERC_INFER, 0, cyc, u);
      if (out_p > 0 && out_n > 0) break;
    end
    y = (out_p > out_n) ? 0 : 1;     // train towards the other class
    e0 = (y ? ONE_I - int'(out_p) : ONE_I - int'(out_n));
    for (int t = 0; t < 40; t++) begin
      run(OP_PERC_TRAIN, y, cyc, u);
      n_perc_train++;
      if (u) n_upd++;
    end
    run(OP_PERC_INFER, 0, cyc, u);
    e1 = (y ? ONE_I - int'(out_p) : ONE_I - int'(out_n));
    $display("perceptron: error on trained sample %0d -> %0d (LSB)", e0, e1);
    checks++; if (e1 > e0 || e1 >= e0 && e0 > 2) begin failures++; $display("FAIL perceptron did not learn"); end

    // ---- MLP training on one sample ----
    // pick a sample off the dead zone: with p+ or p- at zero the node's
    // normaliser has A = 1 and the rule's factor (1-1/A) stops all learning
    for (int tries = 0; tries < 200; tries++) begin
      random_x();
      run(OP_MLP, 0, cyc, u);
      if (out_p > 0 && out_n > 0) break;
    end
    y = (out_p > out_n) ? 0 : 1;
    e0 = (y ? ONE_I - int'(out_p) : ONE_I - int'(out_n));
    for (int t = 0; t < 40; t++) begin
      run(OP_MLP_TRAIN, y, cyc, u);
      n_mlp_train++;
      if (u) n_upd++;
    end
    run(OP_MLP, 0, cyc, u);
    e1 = (y ? ONE_I - int'(out_p) : ONE_I - int'(out_n));
    $display("MLP: error on trained sample %0d -> %0d (LSB)", e0, e1);
    checks++; if (e1 > e0 || e1 >= e0 && e0 > 2) begin failures++; $display("FAIL MLP did not learn"); end

    // the write issued while busy must not have changed gamma_perc
    random_x();
    run(OP_PERC_INFER, 0, cyc, u);
    n_perc++;

    $display("mechanisms: perc=%0d perc_train=%0d mlp=%0d mlp_train=%0d svm=%0d upd=%0d busy_start=%0d busy_cfg=%0d",
             n_perc, n_perc_train, n_mlp, n_mlp_train, n_svm, n_upd, n_busy_start, n_busy_cfg);
    checks++; if (n_perc == 0 || n_perc_train == 0 || n_mlp == 0 || n_mlp_train == 0 ||
                  n_svm == 0 || n_upd == 0 || n_busy_start == 0 || n_busy_cfg == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
