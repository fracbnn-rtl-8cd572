// quant_split - 2-bit quantisation of P activations and the split into
// packed MSB and LSB planes.
//
// Each Q7.8 activation x is mapped to q = clamp(floor(x / 2^QSHIFT) + 2, 0, 3),
// a uniform 2-bit code whose MSB equals sign(x) (1 for x >= 0), so the base
// phase of the next layer sees exactly the binarised activation and the LSB
// adds the second bit. Lane p goes to bit p of the MSB and LSB words. The
// quantiser's step is this design's choice (the paper only says that the
// activations are 2 bits wide). Purely combinational.
module quant_split
  import fracbnn_pkg::*;
#(
  parameter int unsigned QP     = P,
  parameter int unsigned QSHIFT = 8
) (
  input  fx_t [QP-1:0]  x,
  output logic [QP-1:0] msb,
  output logic [QP-1:0] lsb
);
  always_comb begin
    for (int p = 0; p < int'(QP); p++) begin
      logic signed [FXW:0] q;
      q = (FXW+1)'(x[p] >>> QSHIFT) + (FXW+1)'(2);
      if (q < 0)      q = '0;
      else if (q > 3) q = (FXW+1)'(3);
      msb[p] = q[1];
      lsb[p] = q[0];
    end
  end
endmodule
