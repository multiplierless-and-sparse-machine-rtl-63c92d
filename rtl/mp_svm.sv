// mp_svm: decision stage of the margin-propagation support vector machine.
//
// For S support vectors with kernel values (K_s+, K_s-) and weights
// (w_s+, w_s-), all in the log-likelihood domain, the decision value is
//   L_f+ - L_f- = MP({w_s+ + K_s+, w_s- + K_s-}, gamma)
//               - MP({w_s+ + K_s-, w_s- + K_s+}, gamma)
// and the class is + when it is positive. Each MP node sees 2S scores, so the
// kernel expansion costs 2S additions per side and no multiplication. The
// equation is the paper's; solving both MP nodes in parallel by the bit-serial
// search of mp_unit is this design's choice. The kernel values are inputs:
// their computation is not part of this block.
//
// Timing: start samples all inputs; done pulses DW+2 cycles later and the
// outputs hold until the next start.
module mp_svm #(
  parameter int S  = 100,   // number of support vectors
  parameter int DW = mp_pkg::DW,
  localparam int IW = DW + 1,
  localparam int ZW = IW + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] k_p [S],
  input  logic signed [DW-1:0] k_n [S],
  input  logic signed [DW-1:0] w_p [S],
  input  logic signed [DW-1:0] w_n [S],
  input  logic        [DW-1:0] gamma,
  output logic                 busy,
  output logic                 done,
  output logic signed [ZW-1:0] lf_p,
  output logic signed [ZW-1:0] lf_n,
  output logic signed [ZW:0]   f,
  output logic                 cls
);

  logic signed [IW-1:0] lp [2*S];
  logic signed [IW-1:0] ln [2*S];
  logic busy_p, busy_n, done_n;
  logic [2*S-1:0] act_p, act_n;
  logic [$clog2(2*S+1)-1:0] cnt_p, cnt_n;

  always_comb begin
    for (int s = 0; s < S; s++) begin
      lp[s]     = IW'(w_p[s]) + IW'(k_p[s]);
      lp[S + s] = IW'(w_n[s]) + IW'(k_n[s]);
      ln[s]     = IW'(w_p[s]) + IW'(k_n[s]);
      ln[S + s] = IW'(w_n[s]) + IW'(k_p[s]);
    end
  end

  mp_unit #(.N(2*S), .IW(IW)) u_fp (
    .clk, .rst_n, .start, .l(lp), .gamma,
    .busy(busy_p), .done, .z(lf_p), .act(act_p), .cnt(cnt_p));

  mp_unit #(.N(2*S), .IW(IW)) u_fn (
    .clk, .rst_n, .start, .l(ln), .gamma,
    .busy(busy_n), .done(done_n), .z(lf_n), .act(act_n), .cnt(cnt_n));

  assign busy = busy_p | busy_n;
  assign f    = (ZW+1)'(lf_p) - (ZW+1)'(lf_n);
  assign cls  = (f > 0);

endmodule
