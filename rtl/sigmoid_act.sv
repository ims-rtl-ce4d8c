// sigmoid_act: sigmoid of the output neuron, as a malicious-probability score.
//
// Purely combinational. The input is the output neuron's pre-activation
// (logit) in the activation format (signed ACT_BITS, ACT_FRAC fractional
// bits); the output is an unsigned PROB_BITS-bit fraction (score / 2^8,
// saturating at 255/256).
//
// The sigmoid is evaluated with the PLAN piecewise-linear approximation,
// which needs only shifts and adds (|x| in real units, y = sigmoid):
//     |x| >= 5            : y = 1
//     2.375 <= |x| < 5    : y = |x|/32 + 0.84375
//     1 <= |x| < 2.375    : y = |x|/8  + 0.625
//     0 <= |x| < 1        : y = |x|/4  + 0.5
// and y(-x) = 1 - y(x). Its largest error is about 0.019, and it is
// monotonic, so a threshold on the score is a threshold on the logit.
//
// The published model ends in a sigmoid; the approximation and the score
// format are this design's own choices.
module sigmoid_act
  import ims_pkg::*;
(
  input  act_t  x,
  output prob_t y
);

  localparam int unsigned ONE = 1 << ACT_FRAC;

  logic [ACT_BITS:0] a;      // |x|, one bit wider so -2^15 fits
  logic [ACT_BITS:0] ypos;   // sigmoid(|x|), ACT_FRAC fractional bits
  logic [ACT_BITS:0] yv;

  always_comb begin
    a = x[ACT_BITS-1] ? (ACT_BITS+1)'(-$signed({x[ACT_BITS-1], x}))
                      : (ACT_BITS+1)'({1'b0, x});
    if (a >= (ACT_BITS+1)'(5 * ONE))
      ypos = (ACT_BITS+1)'(ONE);
    else if (a >= (ACT_BITS+1)'(ONE * 19 / 8))
      ypos = (a >> 5) + (ACT_BITS+1)'(ONE * 27 / 32);
    else if (a >= (ACT_BITS+1)'(ONE))
      ypos = (a >> 3) + (ACT_BITS+1)'(ONE * 5 / 8);
    else
      ypos = (a >> 2) + (ACT_BITS+1)'(ONE / 2);
    yv = x[ACT_BITS-1] ? (ACT_BITS+1)'(ONE) - ypos : ypos;
    // ACT_FRAC fractional bits down to PROB_BITS, saturating 1.0
    if ((yv >> (ACT_FRAC - PROB_BITS)) >= (ACT_BITS+1)'(1 << PROB_BITS))
      y = '1;
    else
      y = prob_t'(yv >> (ACT_FRAC - PROB_BITS));
  end

endmodule
