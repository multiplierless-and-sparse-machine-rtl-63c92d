// tb_mp_svm: self-checking test of the MP SVM decision stage (S = 100).
//
// Random kernel values, weights and gammas are applied; L_f+, L_f-, their
// difference and the class are compared with the reference MP model and the
// DW+2 cycle latency is checked.
`timescale 1ns/1ps
module tb_mp_svm;
  import mp_ref_pkg::*;

  localparam int S = 100, DW = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, cls;
  logic signed [DW-1:0] k_p [S], k_n [S], w_p [S], w_n [S];
  logic [DW-1:0] gamma;
  logic signed [DW+1:0] lf_p, lf_n;
  logic signed [DW+2:0] f;

  mp_svm dut (.clk, .rst_n, .start, .k_p, .k_n, .w_p, .w_n, .gamma, .busy, .done,
    .lf_p, .lf_n, .f, .cls);

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
    int lp[$], ln[$]; int g, cyc, rp, rn;
    lp = {}; ln = {};
    for (int s = 0; s < S; s++) begin
      k_p[s] = DW'(rnd(-100, 20)); k_n[s] = DW'(rnd(-100, 20));
      w_p[s] = DW'(rnd(-100, 100)); w_n[s] = DW'(rnd(-100, 100));
    end
    for (int s = 0; s < S; s++) lp.push_back(int'(w_p[s]) + int'(k_p[s]));
    for (int s = 0; s < S; s++) lp.push_back(int'(w_n[s]) + int'(k_n[s]));
    for (int s = 0; s < S; s++) ln.push_back(int'(w_p[s]) + int'(k_n[s]));
    for (int s = 0; s < S; s++) ln.push_back(int'(w_n[s]) + int'(k_p[s]));
    g = rnd(1, 400); gamma = DW'(g);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check("latency", cyc, DW + 2);
    rp = mp_ref(lp, g); rn = mp_ref(ln, g);
    check("lf_p", int'(lf_p), rp);
    check("lf_n", int'(lf_n), rn);
    check("f", int'(f), rp - rn);
    check("cls", int'(cls), int'(rp > rn));
  endtask

  initial begin
    foreach (k_p[s]) begin k_p[s] = 0; k_n[s] = 0; w_p[s] = 0; w_n[s] = 0; end
    gamma = 16;
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
