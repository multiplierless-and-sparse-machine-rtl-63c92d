// mp_neuron: differential margin-propagation neuron (one node of a layer).
//
// A signed input a is carried as a pair (a+, a-) and so is every weight and
// the bias. The neuron forms two score lists of 2N+1 entries,
//   L+ = { w_i+ + a_i+ , w_i- + a_i- , b+ }   (index i, then N+i, then 2N)
//   L- = { w_i+ + a_i- , w_i- + a_i+ , b- }
// and solves z+ = MP(L+, gamma) and z- = MP(L-, gamma) side by side. A second
// MP node with gamma = 1.0 normalises the pair, z = MP({z+, z-}, 1), and the
// outputs are p+ = [z+ - z]_+ and p- = [z- - z]_+ with p+ + p- = 1 (to within
// two LSBs, since every MP node rounds z down). Products of the conventional
// neuron become the additions w + a; its sum and activation become the MP
// thresholding. This structure and these equations are the paper's; the
// two-stage sequential schedule and the saturation of p to the word range are
// this design's choices.
//
// Timing: start is sampled with all inputs; the first stage takes DW+2 cycles, the hand-over one,
// the second DW+3, so done pulses 2*DW+6 cycles after start. Outputs hold
// until the next start. For training, the neuron also reports the indicator
// vectors act_p[k] = (L+_k > z+), act_n[k] = (L-_k > z-), their counts (the
// paper's Ap and An) and act_k = {z- > z, z+ > z} (whose count is the paper's A).
module mp_neuron #(
  parameter int N    = 2,
  parameter int DW   = mp_pkg::DW,
  parameter int FRAC = mp_pkg::FRAC,
  localparam int M   = 2 * N + 1,
  localparam int IW1 = DW + 1,        // width of a score w + a
  localparam int ZW1 = IW1 + 1,       // width of z+ and z-
  localparam int ZW2 = ZW1 + 1,       // width of z
  localparam int CW  = $clog2(M + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [DW-1:0]  a_p [N],
  input  logic signed [DW-1:0]  a_n [N],
  input  logic signed [DW-1:0]  w_p [N],
  input  logic signed [DW-1:0]  w_n [N],
  input  logic signed [DW-1:0]  b_p,
  input  logic signed [DW-1:0]  b_n,
  input  logic        [DW-1:0]  gamma,     // gamma of the two score MP nodes, in LSBs
  output logic                  busy,
  output logic                  done,
  output logic signed [DW-1:0]  p_p,
  output logic signed [DW-1:0]  p_n,
  output logic signed [ZW1-1:0] z_p,
  output logic signed [ZW1-1:0] z_n,
  output logic signed [ZW2-1:0] z,
  output logic        [M-1:0]   act_p,
  output logic        [M-1:0]   act_n,
  output logic        [CW-1:0]  cnt_p,
  output logic        [CW-1:0]  cnt_n,
  output logic        [1:0]     act_k
);

  localparam logic [ZW1-2:0] ONE = (ZW1-1)'(1) << FRAC;
  localparam logic signed [ZW2:0] PMAX = (ZW2+1)'((1 << (DW - 1)) - 1);

  logic signed [IW1-1:0] lp [M];
  logic signed [IW1-1:0] ln [M];
  logic signed [ZW1-1:0] l2 [2];
  logic busy_p, busy_n, busy_k, done_p, done_n;
  logic [1:0] cnt_k;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      lp[i]     = IW1'(w_p[i]) + IW1'(a_p[i]);
      lp[N + i] = IW1'(w_n[i]) + IW1'(a_n[i]);
      ln[i]     = IW1'(w_p[i]) + IW1'(a_n[i]);
      ln[N + i] = IW1'(w_n[i]) + IW1'(a_p[i]);
    end
    lp[2 * N] = IW1'(b_p);
    ln[2 * N] = IW1'(b_n);
  end

  mp_unit #(.N(M), .IW(IW1)) u_zp (
    .clk, .rst_n, .start, .l(lp), .gamma(gamma),
    .busy(busy_p), .done(done_p), .z(z_p), .act(act_p), .cnt(cnt_p));

  mp_unit #(.N(M), .IW(IW1)) u_zn (
    .clk, .rst_n, .start, .l(ln), .gamma(gamma),
    .busy(busy_n), .done(done_n), .z(z_n), .act(act_n), .cnt(cnt_n));

  assign l2[0] = z_p;
  assign l2[1] = z_n;

  mp_unit #(.N(2), .IW(ZW1)) u_z (
    .clk, .rst_n, .start(done_p), .l(l2), .gamma(ONE),
    .busy(busy_k), .done(done), .z(z), .act(act_k), .cnt(cnt_k));

  assign busy = busy_p | busy_n | busy_k | done_p;

  // p = [z_side - z]_+, saturated to the largest positive word.
  function automatic logic signed [DW-1:0] relu_sat(input logic signed [ZW1-1:0] zs,
                                                    input logic signed [ZW2-1:0] zz);
    logic signed [ZW2:0] d;
    d = (ZW2+1)'(zs) - (ZW2+1)'(zz);
    if (d <= 0)        return '0;
    else if (d > PMAX) return PMAX[DW-1:0];
    else               return d[DW-1:0];
  endfunction

  assign p_p = relu_sat(z_p, z);
  assign p_n = relu_sat(z_n, z);

  // Both score nodes run in lock step; the second stage starts from done_p.
  property p_lockstep;
    @(posedge clk) disable iff (!rst_n) done_p == done_n;
  endproperty
  a_lockstep: assert property (p_lockstep);

endmodule
