// tb_mp_mlp: self-checking test of the three-layer MP MLP (I = 2, J = 30).
//
// Random weights, biases, gammas and inputs are applied; every hidden output
// (p_j+, p_j-) with its active-score counts, the output pair (p_k+, p_k-) and the class are compared with
// a reference built from the neuron model, layer by layer, and the 4*DW+13
// cycle latency is checked.
`timescale 1ns/1ps
module tb_mp_mlp;
  import mp_ref_pkg::*;

  localparam int I = 2, J = 30, DW = 9;
  localparam int ONE = 16, PMAX = 255;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, cls;
  logic signed [DW-1:0] x_p [I], x_n [I];
  logic signed [DW-1:0] wij_p [J][I], wij_n [J][I];
  logic signed [DW-1:0] bj_p [J], bj_n [J], wjk_p [J], wjk_n [J];
  logic signed [DW-1:0] bk_p, bk_n, pk_p, pk_n;
  logic signed [DW-1:0] pj_p [J], pj_n [J];
  logic [DW-1:0] gamma_j, gamma_k;

  mp_mlp dut (.clk, .rst_n, .start, .x_p, .x_n, .wij_p, .wij_n, .bj_p, .bj_n,
    .wjk_p, .wjk_n, .bk_p, .bk_n, .gamma_j, .gamma_k, .busy, .done,
    .pj_p, .pj_n, .pk_p, .pk_n, .cls, .h_actp(), .h_actn(), .h_cntp, .h_cntn,
    .h_actk(), .o_actp(), .o_actn(), .o_cntp, .o_cntn, .o_actk());
  logic [2:0] h_cntp [J], h_cntn [J];
  logic [5:0] o_cntp, o_cntn;

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

  task automatic run;
    int qa[$], qn[$], qwp[$], qwn[$], hp[$], hn[$], ow_p[$], ow_n[$];
    int gj, gk, cyc; neuron_t r;
    qa = {}; qn = {};
    for (int i = 0; i < I; i++) begin
      x_p[i] = DW'(rnd(-48, 48)); x_n[i] = DW'(rnd(-48, 48));
      qa.push_back(int'(x_p[i])); qn.push_back(int'(x_n[i]));
    end
    for (int j = 0; j < J; j++) begin
      for (int i = 0; i < I; i++) begin
        wij_p[j][i] = DW'(rnd(-48, 48)); wij_n[j][i] = DW'(rnd(-48, 48));
      end
      bj_p[j] = DW'(rnd(-48, 48)); bj_n[j] = DW'(rnd(-48, 48));
      wjk_p[j] = DW'(rnd(-40, 40)); wjk_n[j] = DW'(rnd(-40, 40));
    end
    bk_p = DW'(rnd(-40, 40)); bk_n = DW'(rnd(-40, 40));
    gj = rnd(2, 40); gk = rnd(2, 60);
    gamma_j = DW'(gj); gamma_k = DW'(gk);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check("latency", cyc, 4 * DW + 13);
    hp = {}; hn = {}; ow_p = {}; ow_n = {};
    for (int j = 0; j < J; j++) begin
      qwp = {}; qwn = {};
      for (int i = 0; i < I; i++) begin
        qwp.push_back(int'(wij_p[j][i])); qwn.push_back(int'(wij_n[j][i]));
      end
      r = neuron_ref(qa, qn, qwp, qwn, int'(bj_p[j]), int'(bj_n[j]), gj, ONE, PMAX);
      check("pj_p", int'(pj_p[j]), r.pp);
      check("pj_n", int'(pj_n[j]), r.pn);
      check("h_cntp", int'(h_cntp[j]), r.ap);
      check("h_cntn", int'(h_cntn[j]), r.an);
      hp.push_back(r.pp); hn.push_back(r.pn);
      ow_p.push_back(int'(wjk_p[j])); ow_n.push_back(int'(wjk_n[j]));
    end
    r = neuron_ref(hp, hn, ow_p, ow_n, int'(bk_p), int'(bk_n), gk, ONE, PMAX);
    check("o_cntp", int'(o_cntp), r.ap);
    check("o_cntn", int'(o_cntn), r.an);
    check("pk_p", int'(pk_p), r.pp);
    check("pk_n", int'(pk_n), r.pn);
    check("cls", int'(cls), int'(r.pp > r.pn));
  endtask

  initial begin
    foreach (x_p[i]) begin x_p[i] = 0; x_n[i] = 0; end
    foreach (bj_p[j]) begin
      bj_p[j] = 0; bj_n[j] = 0; wjk_p[j] = 0; wjk_n[j] = 0;
      foreach (x_p[i]) begin wij_p[j][i] = 0; wij_n[j][i] = 0; end
    end
    bk_p = 0; bk_n = 0; gamma_j = 16; gamma_k = 16;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) run();
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
