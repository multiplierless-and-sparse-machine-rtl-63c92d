// mp_mlp: three-layer margin-propagation MLP (inference).
//
// Layer I holds the I input pairs (x_i+, x_i-). Layer J is J mp_neuron
// instances, each with its own weights w_ij+, w_ij-, biases b_j+, b_j- and the
// shared layer gamma gamma_j; its outputs (p_j+, p_j-) lie in [0, 1]. Layer K is
// one mp_neuron over the 2J hidden outputs with weights w_jk+, w_jk-, biases
// b_k+, b_k- and gamma gamma_k. The class is + when p_k+ > p_k-. Only
// additions, rectifications and comparisons are used. The network shape and
// its equations are the paper's; running all J hidden neurons in parallel and
// then the output neuron is this design's schedule.
//
// Timing: start is sampled with x; the hidden layer takes 2*DW+6 cycles, the
// hand-over one and the output layer 2*DW+6, so done pulses 4*DW+13 cycles
// after start.
// Weights are read as levels and must stay stable while busy. Hidden-layer
// outputs are exposed for observation, and the active-score flags and counts
// of every neuron (see mp_neuron) for the training logic of mp_mlp_learn.
module mp_mlp #(
  parameter int I    = 2,    // input dimension
  parameter int J    = 30,   // hidden neurons
  parameter int DW   = mp_pkg::DW,
  parameter int FRAC = mp_pkg::FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] x_p   [I],
  input  logic signed [DW-1:0] x_n   [I],
  input  logic signed [DW-1:0] wij_p [J][I],
  input  logic signed [DW-1:0] wij_n [J][I],
  input  logic signed [DW-1:0] bj_p  [J],
  input  logic signed [DW-1:0] bj_n  [J],
  input  logic signed [DW-1:0] wjk_p [J],
  input  logic signed [DW-1:0] wjk_n [J],
  input  logic signed [DW-1:0] bk_p,
  input  logic signed [DW-1:0] bk_n,
  input  logic        [DW-1:0] gamma_j,
  input  logic        [DW-1:0] gamma_k,
  output logic                 busy,
  output logic                 done,
  output logic signed [DW-1:0] pj_p [J],
  output logic signed [DW-1:0] pj_n [J],
  output logic signed [DW-1:0] pk_p,
  output logic signed [DW-1:0] pk_n,
  output logic                 cls,
  // indicators for training: hidden neurons, then the output neuron
  output logic [2*I:0]         h_actp [J],
  output logic [2*I:0]         h_actn [J],
  output logic [$clog2(2*I+2)-1:0] h_cntp [J],
  output logic [$clog2(2*I+2)-1:0] h_cntn [J],
  output logic [1:0]           h_actk [J],
  output logic [2*J:0]         o_actp,
  output logic [2*J:0]         o_actn,
  output logic [$clog2(2*J+2)-1:0] o_cntp,
  output logic [$clog2(2*J+2)-1:0] o_cntn,
  output logic [1:0]           o_actk
);

  logic [J-1:0] h_busy, h_done;
  logic o_busy;

  for (genvar j = 0; j < J; j++) begin : g_hidden
    logic signed [DW+1:0] zp, zn;
    logic signed [DW+2:0] zz;
    mp_neuron #(.N(I), .DW(DW), .FRAC(FRAC)) u_n (
      .clk, .rst_n, .start,
      .a_p(x_p), .a_n(x_n), .w_p(wij_p[j]), .w_n(wij_n[j]),
      .b_p(bj_p[j]), .b_n(bj_n[j]), .gamma(gamma_j),
      .busy(h_busy[j]), .done(h_done[j]), .p_p(pj_p[j]), .p_n(pj_n[j]),
      .z_p(zp), .z_n(zn), .z(zz), .act_p(h_actp[j]), .act_n(h_actn[j]),
      .cnt_p(h_cntp[j]), .cnt_n(h_cntn[j]), .act_k(h_actk[j]));
  end

  logic signed [DW+1:0] ozp, ozn;
  logic signed [DW+2:0] oz;

  mp_neuron #(.N(J), .DW(DW), .FRAC(FRAC)) u_out (
    .clk, .rst_n, .start(h_done[0]),
    .a_p(pj_p), .a_n(pj_n), .w_p(wjk_p), .w_n(wjk_n),
    .b_p(bk_p), .b_n(bk_n), .gamma(gamma_k),
    .busy(o_busy), .done, .p_p(pk_p), .p_n(pk_n),
    .z_p(ozp), .z_n(ozn), .z(oz), .act_p(o_actp), .act_n(o_actn),
    .cnt_p(o_cntp), .cnt_n(o_cntn), .act_k(o_actk));

  assign busy = (|h_busy) | (|h_done) | o_busy;
  assign cls  = (pk_p > pk_n);

  // All hidden neurons start together and so finish together.
  a_hidden_sync: assert property (@(posedge clk) disable iff (!rst_n)
                                  (h_done == '0) || (h_done == '1));

endmodule
