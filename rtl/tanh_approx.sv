// tanh_approx: the single activation unit of the classifier.
//
// Evaluates the piecewise-quadratic tanh approximation
//     F(x) = sign(x)            for |x| > 2
//     F(x) = (1 + x/4) * x      for -2 < x < 0
//     F(x) = (1 - x/4) * x      for  0 < x < 2
// on a Q5.7 word.  In the quadratic region F(x) = x -/+ x*x/4: the square is
// formed exactly (Q10.14), divided by 4 with a shift and truncated to 7
// fractional bits, so F is odd-symmetric (F(-x) = -F(x)).  At |x| = 2 both
// branches give +-1.0.  The formula is the paper's; the truncation and the
// purely combinational form (no register, zero latency) are choices of this
// design.
//
// Interface: x (signed Q5.7) in, y (signed Q5.7, range [-1, 1]) out.
module tanh_approx
  import lst_pkg::*;
(
  input  word_t x,
  output word_t y
);

  localparam int TWO  = 2 << FRAC_W;            // 2.0 in Q5.7
  localparam int SQ_W = 2 * DATA_W;

  logic [DATA_W:0]     ax;                      // |x|, one bit wider for -2048
  logic [SQ_W-1:0]     sq;                      // x*x, Q10.14, unsigned
  word_t               quarter_sq;              // floor(x*x/4) in Q5.7

  always_comb begin
    ax = x[DATA_W-1] ? (DATA_W+1)'(-$signed({x[DATA_W-1], x})) : {1'b0, x};
    sq = SQ_W'(ax) * SQ_W'(ax);
    quarter_sq = word_t'(sq >> (2 + FRAC_W));
    if (int'(ax) >= TWO)
      y = x[DATA_W-1] ? -ONE : ONE;
    else if (x[DATA_W-1])
      y = x + quarter_sq;                       // (1 + x/4) x, x < 0
    else
      y = x - quarter_sq;                       // (1 - x/4) x, x >= 0
  end

endmodule
