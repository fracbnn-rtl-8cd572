// bn_bprelu - BatchNorm followed by the biased PReLU of one channel.
//
// The popcount x of an output feature is normalised with the channel's
// folded BatchNorm, y = bn1_scale * x + bn1_bias, and then passed through the
// biased PReLU: a PReLU between two learnable biases, so that the kink moves
// from the origin to (alpha, gamma):
//   d = y - alpha;  z = (d >= 0) ? d : beta * d;  out = z + gamma.
// Scale, biases and slope are signed Q7.8; x is an unsigned integer. The
// product beta*d is shifted right by the 8 fractional bits (rounding toward
// minus infinity) and results saturate to 16 bits. The number format is this
// design's choice. Purely combinational.
module bn_bprelu
  import fracbnn_pkg::*;
(
  input  cnt_t        x,
  input  chan_param_t prm,
  output fx_t         y
);
  fx_t                 y1;
  logic signed [47:0]  d, z;

  always_comb begin
    y1 = sat_fx(48'(prm.bn1_scale) * $signed({1'b0, x}) + 48'(prm.bn1_bias));
    d  = 48'(y1) - 48'(prm.alpha);
    if (d >= 0) z = d;
    else        z = (48'(prm.beta) * d) >>> FRAC;
    y  = sat_fx(z + 48'(prm.gamma));
  end
endmodule
