// tb_mp_mlp_learn: self-checking test of MP MLP learning (I = 2, J = 30).
//
// Loads random parameters through the write port and applies a long run of
// random training and inference operations. A reference copy of every
// parameter, with its guard bits, is stepped with the derivative expressions
// written out term by term as products of indicator functions (output-layer
// terms, and the four-term hidden-layer chain of the MLP appendix), each gain
// G = (1-1/A) 1(z_side > z) / count realised as the shift 1 + ceil(log2 count).
// After each operation p_k+, p_k-, the class, the update flag and every
// parameter are compared, and the 4*DW+14 cycle latency is checked.
`timescale 1ns/1ps
module tb_mp_mlp_learn;
  import mp_ref_pkg::*;
  import mp_pkg::*;

  localparam int I = 2, J = 30, DWT = 9, FR = 4, MG = 10;
  localparam int ONE_I = 16, PMAX = 255;
  localparam int WMAX = (1 << (DWT + MG - 1)) - 1;
  localparam int WMIN = -(1 << (DWT + MG - 1));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_upd = 0, n_hidden_moves = 0;

  logic wr_en = 0; msel_e wr_sel = MSEL_WIJ_P; logic [7:0] wr_j = 0, wr_i = 0;
  logic signed [DWT-1:0] wr_data = 0;
  logic start = 0, train = 0, y_pos = 0;
  logic signed [DWT-1:0] x_p [I], x_n [I];
  logic [DWT-1:0] gamma_j = 16, gamma_k = 16;
  logic [3:0] eps_shift = 0;
  logic busy, done, upd, cls;
  logic signed [DWT-1:0] pk_p, pk_n, bk_p, bk_n;
  logic signed [DWT-1:0] wij_p [J][I], wij_n [J][I];
  logic signed [DWT-1:0] bj_p [J], bj_n [J], wjk_p [J], wjk_n [J];

  mp_mlp_learn dut (.clk, .rst_n, .wr_en, .wr_sel, .wr_j, .wr_i, .wr_data,
    .start, .train, .x_p, .x_n, .y_pos, .gamma_j, .gamma_k, .eps_shift,
    .busy, .done, .upd, .pk_p, .pk_n, .cls,
    .wij_p, .wij_n, .bj_p, .bj_n, .wjk_p, .wjk_n, .bk_p, .bk_n);

  // reference parameters, guard units
  int r_wij_p [J][I], r_wij_n [J][I];
  int r_bj_p [J], r_bj_n [J], r_wjk_p [J], r_wjk_n [J];
  int r_bk_p, r_bk_n;

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

  // -epsilon * s * ind * 2**-(eps + sh) in guard units
  function automatic int t(input int s, input bit ind, input int sh);
    int mag;
    mag = (1 << (FR + MG)) >> (int'(eps_shift) + sh);
    return ind ? -s * mag : 0;
  endfunction

  task automatic write(input msel_e sel, input int j, input int i, input int val);
    @(negedge clk);
    wr_en = 1; wr_sel = sel; wr_j = 8'(j); wr_i = 8'(i); wr_data = DWT'(val);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic load_random;
    for (int j = 0; j < J; j++) begin
      for (int i = 0; i < I; i++) begin
        r_wij_p[j][i] = rnd(-40, 40); write(MSEL_WIJ_P, j, i, r_wij_p[j][i]);
        r_wij_n[j][i] = rnd(-40, 40); write(MSEL_WIJ_N, j, i, r_wij_n[j][i]);
        r_wij_p[j][i] <<<= MG; r_wij_n[j][i] <<<= MG;
      end
      r_bj_p[j] = rnd(-40, 40); write(MSEL_BJ_P, j, 0, r_bj_p[j]); r_bj_p[j] <<<= MG;
      r_bj_n[j] = rnd(-40, 40); write(MSEL_BJ_N, j, 0, r_bj_n[j]); r_bj_n[j] <<<= MG;
      r_wjk_p[j] = rnd(-30, 30); write(MSEL_WJK_P, j, 0, r_wjk_p[j]); r_wjk_p[j] <<<= MG;
      r_wjk_n[j] = rnd(-30, 30); write(MSEL_WJK_N, j, 0, r_wjk_n[j]); r_wjk_n[j] <<<= MG;
    end
    r_bk_p = rnd(-30, 30); write(MSEL_BK_P, 0, 0, r_bk_p); r_bk_p <<<= MG;
    r_bk_n = rnd(-30, 30); write(MSEL_BK_N, 0, 0, r_bk_n); r_bk_n <<<= MG;
  endtask

  task automatic op(input bit tr);
    int qa[$], qn[$], qwp[$], qwn[$], hp[$], hn[$], owp[$], own[$];
    neuron_t h[J]; neuron_t o;
    int cyc, y, sp, sn, skp, skn, sjp, sjn, d;
    bit gk, gj, moved;
    qa = {}; qn = {};
    for (int i = 0; i < I; i++) begin
      x_p[i] = DWT'(rnd(-32, 32)); x_n[i] = DWT'(rnd(-32, 32));
      qa.push_back(int'(x_p[i])); qn.push_back(int'(x_n[i]));
    end
    y = rnd(0, 1); y_pos = 1'(y);
    gamma_j = DWT'(rnd(4, 40)); gamma_k = DWT'(rnd(4, 60));
    eps_shift = 4'(rnd(0, 2));
    train = tr;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check("latency", cyc, 4 * DWT + 14);
    hp = {}; hn = {}; owp = {}; own = {};
    for (int j = 0; j < J; j++) begin
      qwp = {}; qwn = {};
      for (int i = 0; i < I; i++) begin
        qwp.push_back(r_wij_p[j][i] >>> MG); qwn.push_back(r_wij_n[j][i] >>> MG);
      end
      h[j] = neuron_ref(qa, qn, qwp, qwn, r_bj_p[j] >>> MG, r_bj_n[j] >>> MG,
                        int'(gamma_j), ONE_I, PMAX);
      hp.push_back(h[j].pp); hn.push_back(h[j].pn);
      owp.push_back(r_wjk_p[j] >>> MG); own.push_back(r_wjk_n[j] >>> MG);
    end
    o = neuron_ref(hp, hn, owp, own, r_bk_p >>> MG, r_bk_n >>> MG, int'(gamma_k), ONE_I, PMAX);
    check("pk_p", int'(pk_p), o.pp);
    check("pk_n", int'(pk_n), o.pn);
    check("cls", int'(cls), int'(o.pp > o.pn));
    moved = 0;
    if (tr) begin
      sp  = sgn(o.pp - ONE_I * y);
      sn  = sgn(o.pn - ONE_I * (1 - y));
      gk  = (o.ak == 2);
      skp = 1 + clog2_ref(o.ap);
      skn = 1 + clog2_ref(o.an);
      // output layer: score j of L+_k is w_jk+ + p_j+, score J+j is w_jk- + p_j-;
      // score j of L-_k is w_jk+ + p_j-, score J+j is w_jk- + p_j+.
      for (int j = 0; j < J; j++) begin
        bit kp_j, kp_Jj, kn_j, kn_Jj;
        kp_j  = o.lp[j] > o.zp;      kp_Jj = o.lp[J + j] > o.zp;
        kn_j  = o.ln[j] > o.zn;      kn_Jj = o.ln[J + j] > o.zn;
        if (gk) begin
          d = t(sp, kp_j, skp) + t(sn, kn_j, skn);   r_wjk_p[j] = sat(r_wjk_p[j] + d); moved |= (d != 0);
          d = t(sp, kp_Jj, skp) + t(sn, kn_Jj, skn); r_wjk_n[j] = sat(r_wjk_n[j] + d); moved |= (d != 0);
        end
        gj  = gk && (h[j].ak == 2);
        sjp = 1 + clog2_ref(h[j].ap);
        sjn = 1 + clog2_ref(h[j].an);
        if (gj) begin
          for (int i = 0; i < I; i++) begin
            bit jp_i, jn_i, jp_Ii, jn_Ii;
            jp_i  = h[j].lp[i] > h[j].zp;      // x_i+ + w_ij+ > z_j+
            jn_i  = h[j].ln[i] > h[j].zn;      // x_i- + w_ij+ > z_j-
            jp_Ii = h[j].lp[I + i] > h[j].zp;  // x_i- + w_ij- > z_j+
            jn_Ii = h[j].ln[I + i] > h[j].zn;  // x_i+ + w_ij- > z_j-
            // dp_k+/dw_ij+ and dp_k-/dw_ij+
            d = t(sp, kp_j && jp_i, skp + sjp) + t(sp, kp_Jj && jn_i, skp + sjn)
              + t(sn, kn_j && jn_i, skn + sjn) + t(sn, kn_Jj && jp_i, skn + sjp);
            r_wij_p[j][i] = sat(r_wij_p[j][i] + d);
            if (d != 0) begin moved = 1; n_hidden_moves++; end
            // dp_k+/dw_ij- and dp_k-/dw_ij-
            d = t(sp, kp_j && jp_Ii, skp + sjp) + t(sp, kp_Jj && jn_Ii, skp + sjn)
              + t(sn, kn_j && jn_Ii, skn + sjn) + t(sn, kn_Jj && jp_Ii, skn + sjp);
            r_wij_n[j][i] = sat(r_wij_n[j][i] + d);
            if (d != 0) begin moved = 1; n_hidden_moves++; end
          end
          d = t(sp, kp_j && (h[j].lp[2 * I] > h[j].zp), skp + sjp)
            + t(sn, kn_Jj && (h[j].lp[2 * I] > h[j].zp), skn + sjp);
          r_bj_p[j] = sat(r_bj_p[j] + d); moved |= (d != 0);
          d = t(sp, kp_Jj && (h[j].ln[2 * I] > h[j].zn), skp + sjn)
            + t(sn, kn_j && (h[j].ln[2 * I] > h[j].zn), skn + sjn);
          r_bj_n[j] = sat(r_bj_n[j] + d); moved |= (d != 0);
        end
      end
      if (gk) begin
        d = t(sp, o.lp[2 * J] > o.zp, skp); r_bk_p = sat(r_bk_p + d); moved |= (d != 0);
        d = t(sn, o.ln[2 * J] > o.zn, skn); r_bk_n = sat(r_bk_n + d); moved |= (d != 0);
      end
    end
    check("upd", int'(upd), int'(moved));
    if (moved) n_upd++;
    @(negedge clk);
    for (int j = 0; j < J; j++) begin
      for (int i = 0; i < I; i++) begin
        check("wij_p", int'(wij_p[j][i]), r_wij_p[j][i] >>> MG);
        check("wij_n", int'(wij_n[j][i]), r_wij_n[j][i] >>> MG);
      end
      check("bj_p", int'(bj_p[j]), r_bj_p[j] >>> MG);
      check("bj_n", int'(bj_n[j]), r_bj_n[j] >>> MG);
      check("wjk_p", int'(wjk_p[j]), r_wjk_p[j] >>> MG);
      check("wjk_n", int'(wjk_n[j]), r_wjk_n[j] >>> MG);
    end
    check("bk_p", int'(bk_p), r_bk_p >>> MG);
    check("bk_n", int'(bk_n), r_bk_n >>> MG);
  endtask

  initial begin
    foreach (x_p[i]) begin x_p[i] = 0; x_n[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      load_random();
      for (int n = 0; n < 100; n++) op(n % 4 != 0);
    end
    checks++;
    if (n_upd < 20 || n_hidden_moves < 20) begin
      failures++;
      $display("FAIL too few updates: %0d steps, %0d hidden-weight moves", n_upd, n_hidden_moves);
    end
    $display("steps with updates: %0d, hidden-weight moves: %0d", n_upd, n_hidden_moves);
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
