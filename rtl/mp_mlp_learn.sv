// mp_mlp_learn: MP MLP with its parameters and on-chip learning.
//
// Holds every parameter of the three-layer network (w_ij+-, b_j+-, w_jk+-,
// b_k+-) with MGUARD extra fraction bits, runs mp_mlp on the top DW bits and,
// for a training operation, applies one step of the L1-cost gradient rule
// the moment the inference is done.
//
// The gradient is assembled from the Boolean indicators and counts of the MP
// nodes. For a node with scores L, threshold z and normaliser count A, write
// G = (1-1/A) 1(z_side > z) / count, the gain from a score of the node to its
// output p. Only A = 2 gives a non-zero gain, (1-1/A) = 1/2, and 1/count is
// replaced by a right shift of ceil(log2(count)) bits, so G is a shift.
// With s+ = sign(p_k+ - y+), s- = sign(p_k- - y-):
//   output layer:  dE/dw_jk+ = s+ G_k+ 1(p_j+ + w_jk+ > z_k+) + s- G_k- 1(p_j- + w_jk+ > z_k-)
//                  (likewise w_jk- with p_j-/p_j+ swapped, b_k+ and b_k- from one term)
//   hidden layer:  the error reaching p_j+ and p_j- is
//                  e_j+ = s+ G_k+ 1(p_j+ + w_jk+ > z_k+) + s- G_k- 1(p_j+ + w_jk- > z_k-)
//                  e_j- = s+ G_k+ 1(p_j- + w_jk- > z_k+) + s- G_k- 1(p_j- + w_jk+ > z_k-)
//                  and dE/dw_ij+ = e_j+ G_j+ 1(x_i+ + w_ij+ > z_j+) + e_j- G_j- 1(x_i- + w_ij+ > z_j-)
//                  (likewise w_ij-, b_j+ through p_j+ only, b_j- through p_j- only).
// Expanded, these are term for term the derivative expressions of the
// paper's MLP appendix; every product of two gains is a sum of two shifts.
// Each parameter moves by -epsilon times its gradient with epsilon =
// 2**-eps_shift. Design choices: online (per-sample) updates, the shift
// approximation of 1/count, MGUARD guard bits, saturating updates.
//
// Interface: wr_* writes one parameter (DW-bit value, guard bits cleared);
// wr_j selects the hidden neuron, wr_i the input. Writes are ignored while
// busy. start/train/y_pos as for mp_perceptron. done pulses 4*DW+14 cycles
// after start, in the cycle the update is written; upd pulses with it when a
// parameter moved.
module mp_mlp_learn #(
  parameter int I      = 2,
  parameter int J      = 30,
  parameter int DW     = mp_pkg::DW,
  parameter int FRAC   = mp_pkg::FRAC,
  parameter int MGUARD = mp_pkg::MGUARD,
  localparam int WW    = DW + MGUARD
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  mp_pkg::msel_e        wr_sel,
  input  logic [7:0]           wr_j,
  input  logic [7:0]           wr_i,
  input  logic signed [DW-1:0] wr_data,
  input  logic                 start,
  input  logic                 train,
  input  logic signed [DW-1:0] x_p [I],
  input  logic signed [DW-1:0] x_n [I],
  input  logic                 y_pos,
  input  logic        [DW-1:0] gamma_j,
  input  logic        [DW-1:0] gamma_k,
  input  logic        [3:0]    eps_shift,
  output logic                 busy,
  output logic                 done,
  output logic                 upd,
  output logic signed [DW-1:0] pk_p,
  output logic signed [DW-1:0] pk_n,
  output logic                 cls,
  // parameters as seen by the network (top DW bits)
  output logic signed [DW-1:0] wij_p [J][I],
  output logic signed [DW-1:0] wij_n [J][I],
  output logic signed [DW-1:0] bj_p [J],
  output logic signed [DW-1:0] bj_n [J],
  output logic signed [DW-1:0] wjk_p [J],
  output logic signed [DW-1:0] wjk_n [J],
  output logic signed [DW-1:0] bk_p,
  output logic signed [DW-1:0] bk_n
);

  import mp_pkg::*;

  localparam logic signed [WW+1:0] WMAX = (WW+2)'((1 << (WW - 1)) - 1);
  localparam logic signed [WW+1:0] WMIN = -(WW+2)'(1 << (WW - 1));
  localparam logic signed [DW:0]   ONE  = (DW+1)'(1 << FRAC);
  localparam int HC = $clog2(2*I+2);
  localparam int OC = $clog2(2*J+2);

  // full-precision parameter registers
  logic signed [WW-1:0] r_wij_p [J][I];
  logic signed [WW-1:0] r_wij_n [J][I];
  logic signed [WW-1:0] r_bj_p [J], r_bj_n [J], r_wjk_p [J], r_wjk_n [J];
  logic signed [WW-1:0] r_bk_p, r_bk_n;

  always_comb begin
    for (int j = 0; j < J; j++) begin
      for (int i = 0; i < I; i++) begin
        wij_p[j][i] = r_wij_p[j][i][WW-1:MGUARD];
        wij_n[j][i] = r_wij_n[j][i][WW-1:MGUARD];
      end
      bj_p[j]  = r_bj_p[j][WW-1:MGUARD];
      bj_n[j]  = r_bj_n[j][WW-1:MGUARD];
      wjk_p[j] = r_wjk_p[j][WW-1:MGUARD];
      wjk_n[j] = r_wjk_n[j][WW-1:MGUARD];
    end
    bk_p = r_bk_p[WW-1:MGUARD];
    bk_n = r_bk_n[WW-1:MGUARD];
  end

  logic net_busy, net_done;
  logic signed [DW-1:0] pj_p [J], pj_n [J];
  logic [2*I:0] h_actp [J], h_actn [J];
  logic [HC-1:0] h_cntp [J], h_cntn [J];
  logic [1:0] h_actk [J];
  logic [2*J:0] o_actp, o_actn;
  logic [OC-1:0] o_cntp, o_cntn;
  logic [1:0] o_actk;

  mp_mlp #(.I(I), .J(J), .DW(DW), .FRAC(FRAC)) u_net (
    .clk, .rst_n, .start, .x_p, .x_n, .wij_p, .wij_n, .bj_p, .bj_n,
    .wjk_p, .wjk_n, .bk_p, .bk_n, .gamma_j, .gamma_k,
    .busy(net_busy), .done(net_done), .pj_p, .pj_n, .pk_p, .pk_n, .cls,
    .h_actp, .h_actn, .h_cntp, .h_cntn, .h_actk,
    .o_actp, .o_actn, .o_cntp, .o_cntn, .o_actk);

  assign busy = net_busy;

  // ---- gradient ------------------------------------------------------------
  logic train_r, y_r;
  sgn_e s_p, s_n;

  function automatic sgn_e sign_of(input logic signed [DW:0] d);
    if (d > 0)      return SGN_POS;
    else if (d < 0) return SGN_NEG;
    else            return SGN_ZERO;
  endfunction

  // -epsilon * s * 2**-sh when ind is set (in guard-bit units).
  function automatic logic signed [WW+1:0] term(input sgn_e s, input logic ind,
                                               input int unsigned sh);
    logic signed [WW+1:0] mag;
    mag = ((WW+2)'(1) <<< (FRAC + MGUARD)) >>> sh;
    if (!ind)              return '0;
    else if (s == SGN_POS) return -mag;
    else if (s == SGN_NEG) return mag;
    else                   return '0;
  endfunction

  function automatic logic signed [WW-1:0] sat_add(input logic signed [WW-1:0] w,
                                                   input logic signed [WW+1:0] dlt);
    logic signed [WW+2:0] r;
    r = (WW+3)'(w) + (WW+3)'(dlt);
    if (r > (WW+3)'(WMAX))      return WMAX[WW-1:0];
    else if (r < (WW+3)'(WMIN)) return WMIN[WW-1:0];
    else                        return r[WW-1:0];
  endfunction

  // Deltas of every parameter for the current sample.
  logic signed [WW+1:0] d_wij_p [J][I], d_wij_n [J][I];
  logic signed [WW+1:0] d_bj_p [J], d_bj_n [J], d_wjk_p [J], d_wjk_n [J];
  logic signed [WW+1:0] d_bk_p, d_bk_n;
  logic any_move;

  always_comb begin
    int unsigned shk_p, shk_n, shj_p, shj_n;
    logic gk, gj;
    s_p   = sign_of((DW+1)'(pk_p) - (y_r ? ONE : '0));
    s_n   = sign_of((DW+1)'(pk_n) - (y_r ? '0 : ONE));
    gk    = (o_actk == 2'b11);
    // G_k = 2**-(1 + ceil(log2 count)); epsilon adds eps_shift
    shk_p = 32'(eps_shift) + 1 + ceil_log2(32'(o_cntp));
    shk_n = 32'(eps_shift) + 1 + ceil_log2(32'(o_cntn));
    for (int j = 0; j < J; j++) begin
      // output layer
      d_wjk_p[j] = gk ? term(s_p, o_actp[j], shk_p) + term(s_n, o_actn[j], shk_n) : '0;
      d_wjk_n[j] = gk ? term(s_p, o_actp[J+j], shk_p) + term(s_n, o_actn[J+j], shk_n) : '0;
      // hidden layer
      gj    = gk && (h_actk[j] == 2'b11);
      shj_p = 1 + ceil_log2(32'(h_cntp[j]));
      shj_n = 1 + ceil_log2(32'(h_cntn[j]));
      for (int i = 0; i < I; i++) begin
        d_wij_p[j][i] = !gj ? '0 :
            term(s_p, o_actp[j]   && h_actp[j][i], shk_p + shj_p)
          + term(s_n, o_actn[J+j] && h_actp[j][i], shk_n + shj_p)
          + term(s_p, o_actp[J+j] && h_actn[j][i], shk_p + shj_n)
          + term(s_n, o_actn[j]   && h_actn[j][i], shk_n + shj_n);
        d_wij_n[j][i] = !gj ? '0 :
            term(s_p, o_actp[j]   && h_actp[j][I+i], shk_p + shj_p)
          + term(s_n, o_actn[J+j] && h_actp[j][I+i], shk_n + shj_p)
          + term(s_p, o_actp[J+j] && h_actn[j][I+i], shk_p + shj_n)
          + term(s_n, o_actn[j]   && h_actn[j][I+i], shk_n + shj_n);
      end
      d_bj_p[j] = !gj ? '0 :
            term(s_p, o_actp[j]   && h_actp[j][2*I], shk_p + shj_p)
          + term(s_n, o_actn[J+j] && h_actp[j][2*I], shk_n + shj_p);
      d_bj_n[j] = !gj ? '0 :
            term(s_p, o_actp[J+j] && h_actn[j][2*I], shk_p + shj_n)
          + term(s_n, o_actn[j]   && h_actn[j][2*I], shk_n + shj_n);
    end
    d_bk_p = gk ? term(s_p, o_actp[2*J], shk_p) : '0;
    d_bk_n = gk ? term(s_n, o_actn[2*J], shk_n) : '0;
    any_move = (d_bk_p != 0) || (d_bk_n != 0);
    for (int j = 0; j < J; j++) begin
      any_move = any_move || (d_wjk_p[j] != 0) || (d_wjk_n[j] != 0)
                          || (d_bj_p[j] != 0) || (d_bj_n[j] != 0);
      for (int i = 0; i < I; i++)
        any_move = any_move || (d_wij_p[j][i] != 0) || (d_wij_n[j][i] != 0);
    end
  end

  // ---- registers -------------------------------------------------------------
  logic wr_ok;
  assign wr_ok = wr_en && !net_busy && (32'(wr_j) < J) && (32'(wr_i) < I);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < J; j++) begin
        for (int i = 0; i < I; i++) begin
          r_wij_p[j][i] <= '0;
          r_wij_n[j][i] <= '0;
        end
        r_bj_p[j]  <= '0;
        r_bj_n[j]  <= '0;
        r_wjk_p[j] <= '0;
        r_wjk_n[j] <= '0;
      end
      r_bk_p  <= '0;
      r_bk_n  <= '0;
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
      if (wr_ok) begin
        case (wr_sel)
          MSEL_WIJ_P: r_wij_p[wr_j][wr_i] <= WW'(wr_data) <<< MGUARD;
          MSEL_WIJ_N: r_wij_n[wr_j][wr_i] <= WW'(wr_data) <<< MGUARD;
          MSEL_BJ_P:  r_bj_p[wr_j]        <= WW'(wr_data) <<< MGUARD;
          MSEL_BJ_N:  r_bj_n[wr_j]        <= WW'(wr_data) <<< MGUARD;
          MSEL_WJK_P: r_wjk_p[wr_j]       <= WW'(wr_data) <<< MGUARD;
          MSEL_WJK_N: r_wjk_n[wr_j]       <= WW'(wr_data) <<< MGUARD;
          MSEL_BK_P:  r_bk_p              <= WW'(wr_data) <<< MGUARD;
          MSEL_BK_N:  r_bk_n              <= WW'(wr_data) <<< MGUARD;
          default: ;
        endcase
      end
      if (net_done) begin
        done <= 1'b1;
        if (train_r) begin
          for (int j = 0; j < J; j++) begin
            for (int i = 0; i < I; i++) begin
              r_wij_p[j][i] <= sat_add(r_wij_p[j][i], d_wij_p[j][i]);
              r_wij_n[j][i] <= sat_add(r_wij_n[j][i], d_wij_n[j][i]);
            end
            r_bj_p[j]  <= sat_add(r_bj_p[j], d_bj_p[j]);
            r_bj_n[j]  <= sat_add(r_bj_n[j], d_bj_n[j]);
            r_wjk_p[j] <= sat_add(r_wjk_p[j], d_wjk_p[j]);
            r_wjk_n[j] <= sat_add(r_wjk_n[j], d_wjk_n[j]);
          end
          r_bk_p <= sat_add(r_bk_p, d_bk_p);
          r_bk_n <= sat_add(r_bk_n, d_bk_n);
          upd    <= any_move;
        end
      end
    end
  end

endmodule
