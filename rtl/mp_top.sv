// mp_top: multiplierless margin-propagation classifier.
//
// Three MP classifiers share one input port and one configuration port:
//   * an N = I input MP perceptron that can learn on chip (mp_perceptron),
//   * a three-layer MP MLP with I inputs and J hidden neurons that can also
//     learn on chip (mp_mlp_learn, around mp_mlp),
//   * the decision stage of an MP SVM over S support vectors (mp_svm), whose
//     kernel values (K_s+, K_s-) are supplied from outside.
// The top holds the SVM weights, the gamma values and the learning-rate shift
// in registers written through cfg_* (address = region cfg_sel + index
// cfg_idx, see mp_pkg::cfg_sel_e); perceptron and MLP parameter writes are
// forwarded to those blocks, which keep and update their own. Reset clears
// every weight and bias and sets
// every gamma to 1.0 and eps_shift to 2. The classifiers themselves follow the
// paper; grouping them behind one operation port with this register map is
// this design's choice.
//
// Operation: while busy is low, pulse start with op (mp_pkg::op_e) and the
// inputs. done pulses when the result is valid: 2*DW+7 cycles later for the
// perceptron, 4*DW+14 for MLP inference and training, DW+2 for the SVM.
// cls is the class (1 = class +); out_p/out_n are (p+, p-) of the perceptron
// or MLP output node; svm_f is L_f+ - L_f-. upd pulses with done when a
// training step moved a parameter. Starts and writes arriving while busy are
// ignored.
module mp_top #(
  parameter int I     = 2,
  parameter int J     = 30,
  parameter int S     = 100,
  parameter int DW    = mp_pkg::DW,
  parameter int FRAC  = mp_pkg::FRAC,
  parameter int GUARD = mp_pkg::GUARD,
  parameter int MGUARD = mp_pkg::MGUARD
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration write port
  input  logic                 cfg_we,
  input  mp_pkg::cfg_sel_e     cfg_sel,
  input  logic [15:0]          cfg_idx,
  input  logic signed [DW-1:0] cfg_data,
  // operation port
  input  logic                 start,
  input  mp_pkg::op_e          op,
  input  logic signed [DW-1:0] x_p [I],
  input  logic signed [DW-1:0] x_n [I],
  input  logic                 y_pos,
  input  logic signed [DW-1:0] k_p [S],
  input  logic signed [DW-1:0] k_n [S],
  // results
  output logic                 busy,
  output logic                 done,
  output logic                 cls,
  output logic signed [DW-1:0] out_p,
  output logic signed [DW-1:0] out_n,
  output logic signed [DW+2:0] svm_f,
  output logic                 upd
);

  import mp_pkg::*;

  localparam int XW = (I > 1) ? $clog2(I) : 1;
  localparam logic [DW-1:0] ONE = DW'(1) << FRAC;

  // ---- control registers and SVM weights ---------------------------------
  logic signed [DW-1:0] ws_p [S], ws_n [S];
  logic        [DW-1:0] gamma_perc, gamma_j, gamma_k, gamma_svm;
  logic        [3:0]    eps_shift;

  logic busy_i;
  logic cfg_ok;
  int unsigned cx;
  assign cfg_ok = cfg_we && !busy_i;
  assign cx = 32'(cfg_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < S; s++) begin
        ws_p[s] <= '0;
        ws_n[s] <= '0;
      end
      gamma_perc <= ONE;
      gamma_j    <= ONE;
      gamma_k    <= ONE;
      gamma_svm  <= ONE;
      eps_shift  <= 4'd2;
    end else if (cfg_ok) begin
      case (cfg_sel)
        SEL_WS_P:  if (cx < S) ws_p[cx] <= cfg_data;
        SEL_WS_N:  if (cx < S) ws_n[cx] <= cfg_data;
        SEL_CTRL: begin
          case (cfg_idx)
            16'd0: gamma_perc <= cfg_data;
            16'd1: gamma_j    <= cfg_data;
            16'd2: gamma_k    <= cfg_data;
            16'd3: gamma_svm  <= cfg_data;
            16'd4: eps_shift  <= cfg_data[3:0];
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  // ---- perceptron --------------------------------------------------------
  logic  p_wr_en;
  psel_e p_wr_sel;
  always_comb begin
    p_wr_en  = cfg_ok && (cfg_sel inside {SEL_PW_P, SEL_PW_N, SEL_PB});
    p_wr_sel = PSEL_W_P;
    case (cfg_sel)
      SEL_PW_P: p_wr_sel = PSEL_W_P;
      SEL_PW_N: p_wr_sel = PSEL_W_N;
      default:  p_wr_sel = cfg_idx[0] ? PSEL_B_N : PSEL_B_P;
    endcase
  end

  logic go;
  op_e  op_r;
  assign go = start && !busy_i;

  logic perc_busy, perc_done, perc_cls, perc_upd;
  logic signed [DW-1:0] perc_pp, perc_pn;
  logic signed [DW-1:0] pw_p [I], pw_n [I];
  logic signed [DW-1:0] pb_p, pb_n;

  mp_perceptron #(.N(I), .DW(DW), .FRAC(FRAC), .GUARD(GUARD)) u_perc (
    .clk, .rst_n,
    .wr_en(p_wr_en), .wr_sel(p_wr_sel),
    .wr_idx((cfg_sel == SEL_PB) ? XW'(0) : XW'(cfg_idx)), .wr_data(cfg_data),
    .start(go && (op == OP_PERC_INFER || op == OP_PERC_TRAIN)),
    .train(op == OP_PERC_TRAIN), .x_p, .x_n, .y_pos,
    .gamma(gamma_perc), .eps_shift,
    .busy(perc_busy), .done(perc_done), .upd(perc_upd),
    .p_p(perc_pp), .p_n(perc_pn), .cls(perc_cls),
    .w_p_o(pw_p), .w_n_o(pw_n), .b_p_o(pb_p), .b_n_o(pb_n));

  // ---- MLP ------------------------------------------------------------------
  logic  m_wr_en;
  msel_e m_wr_sel;
  logic [7:0] m_wr_j, m_wr_i;
  always_comb begin
    m_wr_en  = cfg_ok;
    m_wr_sel = MSEL_WIJ_P;
    m_wr_j   = cfg_idx[15:8];
    m_wr_i   = cfg_idx[7:0];
    case (cfg_sel)
      SEL_WIJ_P: m_wr_sel = MSEL_WIJ_P;
      SEL_WIJ_N: m_wr_sel = MSEL_WIJ_N;
      SEL_BJ_P:  begin m_wr_sel = MSEL_BJ_P;  m_wr_j = cfg_idx[7:0]; m_wr_i = '0; end
      SEL_BJ_N:  begin m_wr_sel = MSEL_BJ_N;  m_wr_j = cfg_idx[7:0]; m_wr_i = '0; end
      SEL_WJK_P: begin m_wr_sel = MSEL_WJK_P; m_wr_j = cfg_idx[7:0]; m_wr_i = '0; end
      SEL_WJK_N: begin m_wr_sel = MSEL_WJK_N; m_wr_j = cfg_idx[7:0]; m_wr_i = '0; end
      SEL_BK: begin
        m_wr_sel = cfg_idx[0] ? MSEL_BK_N : MSEL_BK_P;
        m_wr_j   = '0;
        m_wr_i   = '0;
      end
      default: m_wr_en = 1'b0;
    endcase
    if (cfg_idx[15:8] != 0 && !(cfg_sel inside {SEL_WIJ_P, SEL_WIJ_N})) m_wr_en = 1'b0;
    if (cfg_sel == SEL_BK && cfg_idx[7:1] != 0) m_wr_en = 1'b0;
  end

  logic mlp_busy, mlp_done, mlp_cls, mlp_upd;
  logic signed [DW-1:0] mlp_pp, mlp_pn;
  logic signed [DW-1:0] m_wij_p [J][I], m_wij_n [J][I];
  logic signed [DW-1:0] m_bj_p [J], m_bj_n [J], m_wjk_p [J], m_wjk_n [J];
  logic signed [DW-1:0] m_bk_p, m_bk_n;

  mp_mlp_learn #(.I(I), .J(J), .DW(DW), .FRAC(FRAC), .MGUARD(MGUARD)) u_mlp (
    .clk, .rst_n, .wr_en(m_wr_en), .wr_sel(m_wr_sel), .wr_j(m_wr_j), .wr_i(m_wr_i),
    .wr_data(cfg_data),
    .start(go && (op == OP_MLP || op == OP_MLP_TRAIN)), .train(op == OP_MLP_TRAIN),
    .x_p, .x_n, .y_pos, .gamma_j, .gamma_k, .eps_shift,
    .busy(mlp_busy), .done(mlp_done), .upd(mlp_upd),
    .pk_p(mlp_pp), .pk_n(mlp_pn), .cls(mlp_cls),
    .wij_p(m_wij_p), .wij_n(m_wij_n), .bj_p(m_bj_p), .bj_n(m_bj_n),
    .wjk_p(m_wjk_p), .wjk_n(m_wjk_n), .bk_p(m_bk_p), .bk_n(m_bk_n));

  // ---- SVM ------------------------------------------------------------------
  logic svm_busy, svm_done, svm_cls;
  logic signed [DW+1:0] lf_p, lf_n;

  mp_svm #(.S(S), .DW(DW)) u_svm (
    .clk, .rst_n, .start(go && op == OP_SVM), .k_p, .k_n,
    .w_p(ws_p), .w_n(ws_n), .gamma(gamma_svm),
    .busy(svm_busy), .done(svm_done), .lf_p, .lf_n, .f(svm_f), .cls(svm_cls));

  // ---- operation sequencing -------------------------------------------------
  logic pending;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_r    <= OP_PERC_INFER;
      pending <= 1'b0;
    end else begin
      if (go) begin
        op_r    <= op;
        pending <= 1'b1;
      end else if (done) begin
        pending <= 1'b0;
      end
    end
  end

  assign busy_i = pending | perc_busy | mlp_busy | svm_busy;
  assign busy   = busy_i;
  assign upd    = perc_upd | mlp_upd;

  always_comb begin
    case (op_r)
      OP_PERC_INFER, OP_PERC_TRAIN: begin
        done = perc_done; cls = perc_cls; out_p = perc_pp; out_n = perc_pn;
      end
      OP_MLP, OP_MLP_TRAIN: begin
        done = mlp_done;  cls = mlp_cls;  out_p = mlp_pp;  out_n = mlp_pn;
      end
      default: begin
        done = svm_done;  cls = svm_cls;  out_p = '0;      out_n = '0;
      end
    endcase
  end

  a_one_done: assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0({perc_done, mlp_done, svm_done}));

endmodule
