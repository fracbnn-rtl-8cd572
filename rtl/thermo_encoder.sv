// thermo_encoder - thermometer encoding of one 8-bit pixel for the binary
// input layer.
//
// A pixel of intensity p becomes an L-bit vector holding round(p/R) ones,
// L = ceil(255/R). With the resolution R = 8 used throughout, each colour
// channel turns into 32 binary channels, so one pixel of one colour fills one
// 32-bit word of the MSB plane and an RGB image has 96 binary input channels.
// Following the paper's definition, element TV_i (i = 1..L) is 1 for
// i > L - round(p/R); bit i-1 of tv holds TV_i, so the ones sit at the top.
// A 0 bit stands for -1 in the XNOR arithmetic. Rounding is half up, as the
// paper's example implies (an intensity below R/2 becomes 0).
// Purely combinational.
module thermo_encoder #(
  parameter int unsigned R = 8,
  parameter int unsigned L = (255 + R - 1) / R
) (
  input  logic [7:0]   pixel,
  output logic [L-1:0] tv
);
  logic [8:0] ones;

  always_comb begin
    ones = 9'((int'(pixel) + int'(R / 2)) / int'(R));
    if (ones > 9'(L)) ones = 9'(L);
    for (int i = 0; i < int'(L); i++)
      tv[i] = (i >= int'(L) - int'(ones));
  end
endmodule
