// shortcut_bn - residual addition and the BatchNorm that follows it.
//
// The BPReLU output z of a channel is added to the fixed-point shortcut sc
// (the block input, fetched from off-chip memory), and the sum is normalised
// by the channel's second BatchNorm: y = (bn2_scale * (z + sc)) >> 8 +
// bn2_bias, saturated to Q7.8. With sc_en = 0 (the input layer, which has no
// shortcut) only the BatchNorm is applied. Placing the BPReLU before the
// addition and a BatchNorm after it is the building block of the paper.
// Purely combinational.
module shortcut_bn
  import fracbnn_pkg::*;
(
  input  fx_t         z,
  input  fx_t         sc,
  input  logic        sc_en,
  input  chan_param_t prm,
  output fx_t         y
);
  logic signed [47:0] s;

  always_comb begin
    s = 48'(z) + (sc_en ? 48'(sc) : 48'sd0);
    y = sat_fx(((48'(prm.bn2_scale) * s) >>> FRAC) + 48'(prm.bn2_bias));
  end
endmodule
