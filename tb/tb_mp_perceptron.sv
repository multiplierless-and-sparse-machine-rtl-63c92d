// tb_mp_perceptron: self-checking test of the MP perceptron and its learning rule.
//
// Parameters are loaded through the write port, then a long run of random
// inference and training operations is applied. A reference copy of every
// parameter (with its guard bits) is updated in the testbench straight from
// the gradient equations: sign terms, the (1-1/A) gate, the 1/Ap and 1/An
// shifts and the learning-rate shift. After each operation the class, p+, p-,
// the update flag and all visible parameters are compared, and the latency
// (2*DW+7 cycles) is checked. Inference operations must leave the parameters
// unchanged.
`timescale 1ns/1ps
module tb_mp_perceptron;
  import mp_ref_pkg::*;
  import mp_pkg::*;

  localparam int N = 2;
  localparam int DWT = 9, FRACT = 4, GUARDT = 6;
  localparam int ONE_I = 16, PMAX = 255;
  localparam int WMAX = (1 << (DWT + GUARDT - 1)) - 1;
  localparam int WMIN = -(1 << (DWT + GUARDT - 1));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_upd = 0;

  logic wr_en = 0; psel_e wr_sel = PSEL_W_P; logic [0:0] wr_idx = 0;
  logic signed [DWT-1:0] wr_data = 0;
  logic start = 0, train = 0, y_pos = 0;
  logic signed [DWT-1:0] x_p [N], x_n [N];
  logic [DWT-1:0] gamma = 16;
  logic [3:0] eps_shift = 2;
  logic busy, done, upd, cls;
  logic signed [DWT-1:0] p_p, p_n, b_p_o, b_n_o;
  logic signed [DWT-1:0] w_p_o [N], w_n_o [N];

  mp_perceptron #(.N(N)) dut (.clk, .rst_n, .wr_en, .wr_sel, .wr_idx, .wr_data,
    .start, .train, .x_p, .x_n, .y_pos, .gamma, .eps_shift, .busy, .done, .upd,
    .p_p, .p_n, .cls, .w_p_o, .w_n_o, .b_p_o, .b_n_o);

  // reference parameters in guard units
  int rwp[N], rwn[N], rbp, rbn;

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

  function automatic int sat(input int v);
    return (v > WMAX) ? WMAX : (v < WMIN) ? WMIN : v;
  endfunction

  task automatic write(input psel_e sel, input int idx, input int val);
    @(negedge clk);
    wr_en = 1; wr_sel = sel; wr_idx = 1'(idx); wr_data = DWT'(val);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic op(input bit tr);
    int qa[$], qn[$], qwp[$], qwn[$]; int cyc, y, sp, sn, stp, stn, g, d;
    bit moved; neuron_t r;
    qa = {}; qn = {}; qwp = {}; qwn = {};
    for (int i = 0; i < N; i++) begin
      x_p[i] = DWT'(rnd(-40, 40)); x_n[i] = DWT'(rnd(-40, 40));
      qa.push_back(int'(x_p[i])); qn.push_back(int'(x_n[i]));
      qwp.push_back(rwp[i] >>> GUARDT); qwn.push_back(rwn[i] >>> GUARDT);
    end
    y = rnd(0, 1); y_pos = 1'(y);
    g = rnd(4, 40); gamma = DWT'(g);
    eps_shift = 4'(rnd(0, 3));
    train = tr;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check("latency", cyc, 2 * DWT + 7);
    r = neuron_ref(qa, qn, qwp, qwn, rbp >>> GUARDT, rbn >>> GUARDT, g, ONE_I, PMAX);
    check("p_p", int'(p_p), r.pp);
    check("p_n", int'(p_n), r.pn);
    check("cls", int'(cls), int'(r.pp > r.pn));
    moved = 0;
    if (tr && r.ak == 2) begin
      sp  = sgn(r.pp - ONE_I * y);
      sn  = sgn(r.pn - ONE_I * (1 - y));
      stp = (1 << (FRACT + GUARDT)) >> (int'(eps_shift) + 1 + clog2_ref(r.ap));
      stn = (1 << (FRACT + GUARDT)) >> (int'(eps_shift) + 1 + clog2_ref(r.an));
      for (int i = 0; i < N; i++) begin
        d = -sp * int'(r.lp[i] > r.zp) * stp - sn * int'(r.ln[i] > r.zn) * stn;
        if (d != 0) moved = 1;
        rwp[i] = sat(rwp[i] + d);
        d = -sp * int'(r.lp[N + i] > r.zp) * stp - sn * int'(r.ln[N + i] > r.zn) * stn;
        if (d != 0) moved = 1;
        rwn[i] = sat(rwn[i] + d);
      end
      d = -sp * int'(r.lp[2 * N] > r.zp) * stp;
      if (d != 0) moved = 1;
      rbp = sat(rbp + d);
      d = -sn * int'(r.ln[2 * N] > r.zn) * stn;
      if (d != 0) moved = 1;
      rbn = sat(rbn + d);
    end
    check("upd", int'(upd), int'(moved));
    if (moved) n_upd++;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      check("w_p", int'(w_p_o[i]), rwp[i] >>> GUARDT);
      check("w_n", int'(w_n_o[i]), rwn[i] >>> GUARDT);
    end
    check("b_p", int'(b_p_o), rbp >>> GUARDT);
    check("b_n", int'(b_n_o), rbn >>> GUARDT);
  endtask

  initial begin
    foreach (x_p[i]) begin x_p[i] = 0; x_n[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < N; i++) begin
        rwp[i] = rnd(-60, 60) <<< GUARDT; rwn[i] = rnd(-60, 60) <<< GUARDT;
        write(PSEL_W_P, i, rwp[i] >>> GUARDT);
        write(PSEL_W_N, i, rwn[i] >>> GUARDT);
      end
      rbp = rnd(-60, 60) <<< GUARDT; rbn = rnd(-60, 60) <<< GUARDT;
      write(PSEL_B_P, 0, rbp >>> GUARDT);
      write(PSEL_B_N, 0, rbn >>> GUARDT);
      for (int t = 0; t < 150; t++) op(t % 3 != 0);
    end
    checks++;
    if (n_upd < 20) begin failures++; $display("FAIL only %0d updates exercised", n_upd); end
    $display("updates exercised: %0d", n_upd);
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
