// frac_conv_engine - the fractional convolution engine: P PEs in parallel.
//
// Each cycle the engine takes one B-bit input word for every tap of a 3x3
// window (one pixel position, B input channels) and the matching kernel words
// of P output channels, and adds the P window popcounts to P accumulators.
// The controller steps through the input words of a pixel, so a pixel of
// Cin channels takes Cin/B cycles.
//
// The same accumulators serve both phases of a fractional convolution:
//   base phase   - MSB plane in, accumulate O_MSB for all lanes;
//   update phase - LSB plane in, accumulate O_LSB only for lanes whose O_MSB
//                  is above the channel's threshold (lane_en = upd_mask).
// upd_mask and result are combinational from omsb (O_MSB read back from the
// popcount buffer) and the accumulators:
//   result = (O_MSB << 1) + O_LSB  where O_MSB >  thresh
//          =  O_MSB << 1           where O_MSB <= thresh
//          =  O_MSB                in binary mode (the input layer).
// acc_nxt is the value the accumulators take at the next clock edge, so the
// controller can store a finished sum without a bubble cycle.
// Timing: acc_clr starts a new sum with this cycle's counts (acc_en = 1) or
// with zero; acc_en alone adds to the running sum. Reset clears the sums.
module frac_conv_engine
  import fracbnn_pkg::*;
#(
  parameter int unsigned EB  = B,
  parameter int unsigned EP  = P,
  parameter int unsigned EKK = KK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      acc_clr,
  input  logic                      acc_en,
  input  logic [EKK-1:0][EB-1:0]    act,
  input  logic [EKK-1:0]            tap_en,
  input  logic [EP-1:0][EKK-1:0][EB-1:0] wgt,
  input  logic [EP-1:0]             lane_en,
  input  logic                      binary,
  input  cnt_t [EP-1:0]             omsb,
  input  cnt_t [EP-1:0]             thresh,
  output cnt_t [EP-1:0]             acc,
  output cnt_t [EP-1:0]             acc_nxt,
  output logic [EP-1:0]             upd_mask,
  output cnt_t [EP-1:0]             result
);
  localparam int unsigned SW = $clog2(EKK * EB + 1);
  logic [EP-1:0][SW-1:0] sum;

  for (genvar p = 0; p < int'(EP); p++) begin : g_pe
    frac_pe #(.B(EB), .KK(EKK), .SW(SW)) u_pe (
      .act(act), .wgt(wgt[p]), .tap_en(tap_en), .sum(sum[p])
    );
  end

  always_comb begin
    for (int p = 0; p < int'(EP); p++) begin
      cnt_t add;
      add = (acc_en && lane_en[p]) ? cnt_t'(sum[p]) : '0;
      acc_nxt[p]  = acc_clr ? add : (acc[p] + add);
      upd_mask[p] = !binary && (omsb[p] > thresh[p]);
      if (binary)           result[p] = omsb[p];
      else if (upd_mask[p]) result[p] = (omsb[p] << 1) + acc[p];
      else                  result[p] = omsb[p] << 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  acc <= '0;
    else if (acc_clr || acc_en)  acc <= acc_nxt;
  end
endmodule
