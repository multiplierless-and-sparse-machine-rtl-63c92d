// mp_perceptron: single-layer MP perceptron with on-chip learning.
//
// Inference is one mp_neuron fed with the input pair (x+, x-) and the stored
// parameters w_i+, w_i-, b+, b-. The class is + when p+ > p-.
//
// Learning minimises the L1 cost |y+ - p+| + |y- - p-|. Its gradient with
// respect to every parameter is a product of Boolean indicators and
// reciprocal counts taken from the MP nodes:
//   dE/dw_i+ = s+ (1-1/A) 1(z+>z) (1/Ap) 1(x_i+ + w_i+ > z+)
//            + s- (1-1/A) 1(z->z) (1/An) 1(x_i- + w_i+ > z-)
//   dE/dw_i- = s+ (1-1/A) 1(z+>z) (1/Ap) 1(x_i- + w_i- > z+)
//            + s- (1-1/A) 1(z->z) (1/An) 1(x_i+ + w_i- > z-)
//   dE/db+   = s+ (1-1/A) 1(z+>z) (1/Ap) 1(b+ > z+)
//   dE/db-   = s- (1-1/A) 1(z->z) (1/An) 1(b- > z-)
// with s+ = sign(p+ - y+), s- = sign(p- - y-), A = #{z+, z-} above z, and
// Ap, An the number of active scores of the z+ and z- nodes. Each parameter
// moves by -epsilon times its gradient. These rules are the paper's.
// Design choices: the update is applied after every sample (online), not
// summed over the training set; epsilon = 2**-eps_shift; 1/Ap and 1/An are
// approximated by right shifts of ceil(log2(count)) bits, so the whole update
// uses only comparisons, shifts and additions. Because A is 1 or 2, the
// factor (1-1/A) is 0 or a one-bit shift. Weights keep GUARD extra fraction
// bits so that small steps accumulate; the neuron sees the top DW bits.
// Updates saturate at the range of the weight register.
//
// Interface: wr_* loads a parameter (data in DW-bit words, guard bits
// cleared). start with train = 0 runs inference; with train = 1 it also
// updates the parameters with label y_pos (1 = class +). done pulses once the
// result is valid (and, when training, the same cycle the update is written):
// 2*DW+7 cycles after start. upd pulses with done when any parameter moved.
module mp_perceptron #(
  parameter int N     = 2,
  parameter int DW    = mp_pkg::DW,
  parameter int FRAC  = mp_pkg::FRAC,
  parameter int GUARD = mp_pkg::GUARD,
  localparam int M    = 2 * N + 1,
  localparam int WW   = DW + GUARD,
  localparam int CW   = $clog2(M + 1),
  localparam int XW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // parameter load
  input  logic                 wr_en,
  input  mp_pkg::psel_e                wr_sel,
  input  logic [XW-1:0]        wr_idx,
  input  logic signed [DW-1:0] wr_data,
  // operation
  input  logic                 start,
  input  logic                 train,
  input  logic signed [DW-1:0] x_p [N],
  input  logic signed [DW-1:0] x_n [N],
  input  logic                 y_pos,
  input  logic        [DW-1:0] gamma,
  input  logic        [3:0]    eps_shift,
  output logic                 busy,
  output logic                 done,
  output logic                 upd,
  output logic signed [DW-1:0] p_p,
  output logic signed [DW-1:0] p_n,
  output logic                 cls,
  output logic signed [DW-1:0] w_p_o [N],
  output logic signed [DW-1:0] w_n_o [N],
  output logic signed [DW-1:0] b_p_o,
  output logic signed [DW-1:0] b_n_o
);

  localparam logic signed [WW:0] WMAX = (WW+1)'((1 << (WW - 1)) - 1);
  localparam logic signed [WW:0] WMIN = -(WW+1)'(1 << (WW - 1));
  localparam logic signed [DW:0] ONE  = (DW+1)'(1 << FRAC);

  logic signed [WW-1:0] w_p [N];
  logic signed [WW-1:0] w_n [N];
  logic signed [WW-1:0] b_p, b_n;
  logic train_r, y_r;

  logic n_busy, n_done;
  logic signed [DW+1:0] z_p, z_n;
  logic signed [DW+2:0] z;
  logic [M-1:0] act_p, act_n;
  logic [CW-1:0] cnt_p, cnt_n;
  logic [1:0] act_k;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      w_p_o[i] = w_p[i][WW-1:GUARD];
      w_n_o[i] = w_n[i][WW-1:GUARD];
    end
    b_p_o = b_p[WW-1:GUARD];
    b_n_o = b_n[WW-1:GUARD];
  end

  mp_neuron #(.N(N), .DW(DW), .FRAC(FRAC)) u_neuron (
    .clk, .rst_n, .start,
    .a_p(x_p), .a_n(x_n), .w_p(w_p_o), .w_n(w_n_o), .b_p(b_p_o), .b_n(b_n_o),
    .gamma, .busy(n_busy), .done(n_done), .p_p, .p_n, .z_p, .z_n, .z,
    .act_p, .act_n, .cnt_p, .cnt_n, .act_k);

  assign cls  = (p_p > p_n);
  assign busy = n_busy;

  // ---- gradient terms -------------------------------------------------
  import mp_pkg::*;

  sgn_e s_p, s_n;
  logic signed [WW:0] step_p, step_n;
  logic do_upd;

  function automatic sgn_e sign_of(input logic signed [DW:0] d);
    if (d > 0)      return SGN_POS;
    else if (d < 0) return SGN_NEG;
    else            return SGN_ZERO;
  endfunction

  // Contribution -epsilon * s * indicator * step of one gradient term.
  function automatic logic signed [WW:0] term(input sgn_e s, input logic ind,
                                             input logic signed [WW:0] step);
    if (!ind)               return '0;
    else if (s == SGN_POS)  return -step;
    else if (s == SGN_NEG)  return step;
    else                    return '0;
  endfunction

  function automatic logic signed [WW-1:0] sat_add(input logic signed [WW-1:0] w,
                                                   input logic signed [WW+1:0] dlt);
    logic signed [WW+1:0] r;
    r = (WW+2)'(w) + dlt;
    if (r > (WW+2)'(WMAX))      return WMAX[WW-1:0];
    else if (r < (WW+2)'(WMIN)) return WMIN[WW-1:0];
    else                        return r[WW-1:0];
  endfunction

  always_comb begin
    logic signed [WW:0] one_w;
    one_w  = (WW+1)'(1) <<< (FRAC + GUARD);
    s_p    = sign_of((DW+1)'(p_p) - (y_r ? ONE : '0));
    s_n    = sign_of((DW+1)'(p_n) - (y_r ? '0 : ONE));
    // (1-1/A) = 1/2 when A = 2, zero otherwise: only act_k == 2'b11 updates.
    do_upd = train_r && (act_k == 2'b11);
    step_p = one_w >>> (32'(eps_shift) + 1 + ceil_log2(32'(cnt_p)));
    step_n = one_w >>> (32'(eps_shift) + 1 + ceil_log2(32'(cnt_n)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        w_p[i] <= '0;
        w_n[i] <= '0;
      end
      b_p     <= '0;
      b_n     <= '0;
      train_r <= 1'b0;
      y_r     <= 1'b0;
      done    <= 1'b0;
      upd     <= 1'b0;
    end else begin
      done <= 1'b0;
      upd  <= 1'b0;
      if (start) begin
        train_r <= train;
        y_r     <= y_pos;
      end
      if (wr_en && !n_busy && 32'(wr_idx) < N) begin
        unique case (wr_sel)
          PSEL_W_P: w_p[wr_idx] <= WW'(wr_data) <<< GUARD;
          PSEL_W_N: w_n[wr_idx] <= WW'(wr_data) <<< GUARD;
          PSEL_B_P: b_p         <= WW'(wr_data) <<< GUARD;
          PSEL_B_N: b_n         <= WW'(wr_data) <<< GUARD;
        endcase
      end
      if (n_done) begin
        done <= 1'b1;
        if (do_upd) begin
          logic any;
          any = 1'b0;
          for (int i = 0; i < N; i++) begin
            logic signed [WW+1:0] dwp, dwn;
            dwp = (WW+2)'(term(s_p, act_p[i], step_p)) + (WW+2)'(term(s_n, act_n[i], step_n));
            dwn = (WW+2)'(term(s_p, act_p[N + i], step_p)) + (WW+2)'(term(s_n, act_n[N + i], step_n));
            w_p[i] <= sat_add(w_p[i], dwp);
            w_n[i] <= sat_add(w_n[i], dwn);
            any = any | (dwp != 0) | (dwn != 0);
          end
          b_p <= sat_add(b_p, (WW+2)'(term(s_p, act_p[2 * N], step_p)));
          b_n <= sat_add(b_n, (WW+2)'(term(s_n, act_n[2 * N], step_n)));
          upd <= any | (act_p[2 * N] && s_p != SGN_ZERO) | (act_n[2 * N] && s_n != SGN_ZERO);
        end
      end
    end
  end

endmodule
