// classifier - the matrix-multiplication unit of the final linear layer.
//
// The class dimension is computed in parallel: each cycle with in_valid high
// one input feature (signed Q7.8) is multiplied with the NCLASS signed integer
// weights of its row and added to NCLASS accumulators. clr zeroes the
// accumulators (and takes precedence over in_valid). After all features have
// been fed, score[c] holds the dot product of the feature vector with the
// weights of class c, in units of 2^-8. The weight and accumulator widths are
// this design's choice; the paper only states that the classifier uses
// integer MACs and is computed class-parallel.
module classifier
  import fracbnn_pkg::*;
#(
  parameter int unsigned NCLASS = 1000,
  parameter int unsigned CWW    = 8,
  parameter int unsigned ACCW   = 32
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                clr,
  input  logic                                in_valid,
  input  fx_t                                 feat,
  input  logic signed [CWW-1:0]               w     [NCLASS],
  output logic signed [ACCW-1:0]              score [NCLASS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      for (int c = 0; c < int'(NCLASS); c++) score[c] <= '0;
    else if (clr)
      for (int c = 0; c < int'(NCLASS); c++) score[c] <= '0;
    else if (in_valid)
      for (int c = 0; c < int'(NCLASS); c++)
        score[c] <= score[c] + ACCW'(w[c] * feat);
  end
endmodule
