// tb_mp_perc_workload: the MP perceptron learning a linearly separable 2-D
// problem on chip.
//
// Two classes of points in the plane are separated by the line x1 + x2 = 0,
// with a margin of 0.25 either side. Each point (x1, x2) is presented as the
// differential pairs x_i+ = x_i/2, x_i- = -x_i/2. 100 training and 100 test
// points are drawn with $urandom. The perceptron starts from reset (all
// parameters 0, so p+ = p- = 1/2) and is trained online for several epochs
// with learning rate 2^-2 and gamma = 1.0; test accuracy is measured before
// and after. Checks: the latency of every operation (2*DW+7 cycles), that
// learning moved parameters, and that the final test accuracy is at least
// 90 %. The data set size follows the synthetic experiment of the method;
// the point distribution, encoding and the 90 % bar are this test's choices.
`timescale 1ns/1ps
module tb_mp_perc_workload;
  import mp_pkg::*;

  localparam int N = 2, NS = 100, EPOCHS = 10;
  localparam int LAT = 2 * DW + 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_upd = 0;

  logic wr_en = 0; psel_e wr_sel = PSEL_W_P; logic [0:0] wr_idx = 0;
  logic signed [DW-1:0] wr_data = 0;
  logic start = 0, train = 0, y_pos = 0;
  logic signed [DW-1:0] x_p [N], x_n [N];
  logic [DW-1:0] gamma = 16;
  logic [3:0] eps_shift = 2;
  logic busy, done, upd, cls;
  logic signed [DW-1:0] p_p, p_n, b_p_o, b_n_o;
  logic signed [DW-1:0] w_p_o [N], w_n_o [N];

  mp_perceptron dut (.clk, .rst_n, .wr_en, .wr_sel, .wr_idx, .wr_data,
    .start, .train, .x_p, .x_n, .y_pos, .gamma, .eps_shift, .busy, .done, .upd,
    .p_p, .p_n, .cls, .w_p_o, .w_n_o, .b_p_o, .b_n_o);

  int tr_x[NS][N], te_x[NS][N];
  bit tr_y[NS], te_y[NS];

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // draw a point at least 4 LSB (0.25) away from the line x1 + x2 = 0
  task automatic draw(output int x[N], output bit y);
    int s;
    do begin
      x[0] = int'($urandom_range(64)) - 32;
      x[1] = int'($urandom_range(64)) - 32;
      s = x[0] + x[1];
    end while (s > -4 && s < 4);
    y = (s > 0);
  endtask

  task automatic run(input int x[N], input bit y, input bit tr, output bit c);
    int cyc;
    for (int i = 0; i < N; i++) begin
      x_p[i] = DW'(x[i] / 2);
      x_n[i] = DW'(-(x[i] / 2));
    end
    y_pos = y; train = tr;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check($sformatf("latency %0d", cyc), cyc == LAT);
    if (upd) n_upd++;
    c = cls;
  endtask

  function automatic int pct(input int k);
    return (100 * k) / NS;
  endfunction

  task automatic test_acc(output int acc);
    bit c;
    acc = 0;
    for (int n = 0; n < NS; n++) begin
      run(te_x[n], te_y[n], 1'b0, c);
      if (c == te_y[n]) acc++;
    end
  endtask

  initial begin
    int acc0, acc1;
    bit c;
    for (int n = 0; n < NS; n++) draw(tr_x[n], tr_y[n]);
    for (int n = 0; n < NS; n++) draw(te_x[n], te_y[n]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    test_acc(acc0);
    for (int e = 0; e < EPOCHS; e++) begin
      automatic int errs = 0;
      for (int n = 0; n < NS; n++) begin
        run(tr_x[n], tr_y[n], 1'b1, c);
        if (c != tr_y[n]) errs++;
      end
      $display("epoch %0d: training errors %0d of %0d", e, errs, NS);
    end
    test_acc(acc1);
    $display("test accuracy before training %0d %%, after %0d %%, updates %0d",
             pct(acc0), pct(acc1), n_upd);
    $display("weights w+ = %0d %0d, w- = %0d %0d, b+ = %0d, b- = %0d (LSB)",
             w_p_o[0], w_p_o[1], w_n_o[0], w_n_o[1], b_p_o, b_n_o);
    check("learning moved parameters", n_upd > 0);
    check("test accuracy >= 90 %", pct(acc1) >= 90);
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
