// xnor_popcount - binary multiply-accumulate of two B-bit words.
//
// With +1 coded as 1 and -1 as 0, the product of two binary values is their
// XNOR and the sum over a word is the number of ones in the XNOR result. The
// count is the plain sum of the bits, the simple form the paper found cheap
// enough on LUTs. When en is 0 the word counts no matches, which is how a tap
// that falls into the zero padding around the feature map is removed.
// Purely combinational; the convolution engine registers the result.
module xnor_popcount #(
  parameter int unsigned B  = 32,
  parameter int unsigned CW = $clog2(B + 1)
) (
  input  logic [B-1:0]  act,
  input  logic [B-1:0]  wgt,
  input  logic          en,
  output logic [CW-1:0] cnt
);
  logic [B-1:0] x;

  always_comb begin
    x   = ~(act ^ wgt);
    cnt = '0;
    if (en)
      for (int i = 0; i < int'(B); i++) cnt += CW'(x[i]);
  end
endmodule
