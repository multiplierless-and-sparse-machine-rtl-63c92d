// mp_unit: margin-propagation node, z = MP(L, gamma).
//
// Finds the threshold z that satisfies the reverse water-filling constraint
//     sum_i [L_i - z]_+ = gamma ,   [v]_+ = max(v, 0)
// for N signed scores L_i. The left side falls monotonically as z rises, so the
// unit runs a bit-serial binary search over the fixed-point grid of z: from the
// most significant bit down, a trial bit is kept when the rectified sum at the
// trial threshold is still >= gamma. The result is the exact solution rounded
// down to one LSB. Each step needs only N subtractions, N rectifications, an
// adder tree and one comparison: there is no multiplier and no divider.
// The constraint and its use are the paper's; the bisection schedule is this
// design's own choice (the paper does not say how z is found in hardware).
//
// Interface: pulse start for one cycle with l and gamma valid; they are
// captured. done pulses ZW = IW+1 cycles later; z, act and cnt then stay valid
// until the next start. act[i] = (L_i > z) is the indicator 1(L_i > z) used by
// the training rules and cnt is the number of such scores (the paper's A).
// gamma is unsigned, in LSBs of L, and must be at least 1; it is at most
// 2**(IW-1)-1 by its width, which guarantees a solution inside the z range
// [-2**IW, 2**IW).
module mp_unit #(
  parameter int N  = 5,    // number of scores
  parameter int IW = 10,   // width of a score
  localparam int ZW = IW + 1,
  localparam int CW = $clog2(N + 1),
  localparam int SW = ZW + 1 + $clog2(N + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [IW-1:0] l [N],
  input  logic        [IW-2:0] gamma,
  output logic                 busy,
  output logic                 done,
  output logic signed [ZW-1:0] z,
  output logic        [N-1:0]  act,
  output logic        [CW-1:0] cnt
);

  logic signed [IW-1:0] lr [N];
  logic        [IW-2:0] gr;
  logic        [ZW-1:0] cand;     // z in offset binary (MSB inverted)
  logic        [ZW-1:0] trial;
  logic [$clog2(ZW)-1:0] bitidx;
  logic signed [ZW-1:0] zt;
  logic        [SW-1:0] sum;

  // Rectified sum at the trial threshold.
  always_comb begin
    trial = cand | (ZW'(1) << bitidx);
    zt    = signed'({~trial[ZW-1], trial[ZW-2:0]});
    sum   = '0;
    for (int i = 0; i < N; i++) begin
      logic signed [ZW:0] d;
      d = ZW'(lr[i]) - zt;
      if (d > 0) sum = sum + SW'(unsigned'(d));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cand   <= '0;
      bitidx <= '0;
      gr     <= '0;
      for (int i = 0; i < N; i++) lr[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        lr     <= l;
        gr     <= gamma;
        cand   <= '0;
        bitidx <= $clog2(ZW)'(ZW - 1);
        busy   <= 1'b1;
      end else if (busy) begin
        if (sum >= SW'(gr)) cand <= trial;
        if (bitidx == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bitidx <= bitidx - 1'b1;
        end
      end
    end
  end

  assign z = signed'({~cand[ZW-1], cand[ZW-2:0]});

  always_comb begin
    cnt = '0;
    for (int i = 0; i < N; i++) begin
      act[i] = (ZW'(lr[i]) > z);
      cnt    = cnt + CW'(act[i]);
    end
  end

endmodule
