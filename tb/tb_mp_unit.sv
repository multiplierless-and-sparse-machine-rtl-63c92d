// tb_mp_unit: self-checking test of the margin-propagation node.
//
// Drives random score vectors and gammas (including a tie-heavy set with all
// scores equal) into two instances, N = 5 and N = 61, compares z, the active
// flags and their count with a linear-scan reference, and checks that done
// arrives exactly IW+1 cycles after start.
`timescale 1ns/1ps
module tb_mp_unit;
  import mp_ref_pkg::*;

  localparam int IW = 10;
  localparam int ZW = IW + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // N = 5
  logic start5 = 0, busy5, done5;
  logic signed [IW-1:0] l5 [5];
  logic [IW-2:0] g5;
  logic signed [ZW-1:0] z5;
  logic [4:0] act5;
  logic [2:0] cnt5;
  mp_unit #(.N(5), .IW(IW)) dut5 (.clk, .rst_n, .start(start5), .l(l5), .gamma(g5),
    .busy(busy5), .done(done5), .z(z5), .act(act5), .cnt(cnt5));

  // N = 61
  logic start61 = 0, busy61, done61;
  logic signed [IW-1:0] l61 [61];
  logic [IW-2:0] g61;
  logic signed [ZW-1:0] z61;
  logic [60:0] act61;
  logic [5:0] cnt61;
  mp_unit #(.N(61), .IW(IW)) dut61 (.clk, .rst_n, .start(start61), .l(l61), .gamma(g61),
    .busy(busy61), .done(done61), .z(z61), .act(act61), .cnt(cnt61));

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

  task automatic run5(input int mode);
    int q[$]; int g, zr, cyc;
    q = {};
    for (int i = 0; i < 5; i++) begin
      l5[i] = (mode == 1) ? IW'(37) : IW'(rnd(-512, 511));
      q.push_back(int'(l5[i]));
    end
    g = (mode == 2) ? 255 : rnd(1, 255);
    g5 = (IW-1)'(g);
    @(negedge clk) start5 = 1;
    @(negedge clk) start5 = 0;
    cyc = 0;
    while (!done5) begin @(negedge clk); cyc++; end
    check("latency N=5", cyc, ZW);
    zr = mp_ref(q, g);
    check("z N=5", int'(z5), zr);
    check("cnt N=5", int'(cnt5), count_above(q, zr));
    for (int i = 0; i < 5; i++) check("act N=5", int'(act5[i]), int'(q[i] > zr));
  endtask

  task automatic run61;
    int q[$]; int g, zr, cyc;
    q = {};
    for (int i = 0; i < 61; i++) begin
      l61[i] = IW'(rnd(-300, 300));
      q.push_back(int'(l61[i]));
    end
    g = rnd(1, 511);
    g61 = (IW-1)'(g);
    @(negedge clk) start61 = 1;
    @(negedge clk) start61 = 0;
    cyc = 0;
    while (!done61) begin @(negedge clk); cyc++; end
    check("latency N=61", cyc, ZW);
    zr = mp_ref(q, g);
    check("z N=61", int'(z61), zr);
    check("cnt N=61", int'(cnt61), count_above(q, zr));
  endtask

  initial begin
    foreach (l5[i]) l5[i] = '0;
    foreach (l61[i]) l61[i] = '0;
    g5 = 1; g61 = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) run5(t % 10 == 0 ? 1 : (t % 10 == 1 ? 2 : 0));
    for (int t = 0; t < 100; t++) run61();
    // Known case: scores {4,3,1}, gamma 3 -> z = 2 (2 + 1 = 3).
    l5 = '{IW'(4), IW'(3), IW'(1), -IW'(100), -IW'(100)};
    g5 = 3;
    @(negedge clk) start5 = 1;
    @(negedge clk) start5 = 0;
    wait (done5); @(negedge clk);
    check("known z", int'(z5), 2);
    check("known cnt", int'(cnt5), 2);
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
