// frac_pe - one processing element of the convolution engine.
//
// A PE produces one output channel: it holds the XNOR-popcount of all KK taps
// of the (fully unrolled) 3x3 window for one B-bit input word, and sums the
// tap counts in the same cycle. A 1x1 convolution uses the same PE with only
// the centre tap enabled; taps outside the feature map are disabled too.
// Purely combinational.
module frac_pe #(
  parameter int unsigned B  = 32,
  parameter int unsigned KK = 9,
  parameter int unsigned SW = $clog2(KK * B + 1)
) (
  input  logic [KK-1:0][B-1:0] act,
  input  logic [KK-1:0][B-1:0] wgt,
  input  logic [KK-1:0]        tap_en,
  output logic [SW-1:0]        sum
);
  localparam int unsigned CW = $clog2(B + 1);
  logic [KK-1:0][CW-1:0] cnt;

  for (genvar k = 0; k < int'(KK); k++) begin : g_tap
    xnor_popcount #(.B(B), .CW(CW)) u_bmac (
      .act(act[k]), .wgt(wgt[k]), .en(tap_en[k]), .cnt(cnt[k])
    );
  end

  always_comb begin
    sum = '0;
    for (int k = 0; k < int'(KK); k++) sum += SW'(cnt[k]);
  end
endmodule
