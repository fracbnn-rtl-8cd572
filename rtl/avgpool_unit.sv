// avgpool_unit - average pooling over k x k tiles for P channels at once.
//
// As in the paper, one dimension of a pooling tile is summed by an adder tree
// in a single cycle and the other dimension is accumulated over successive
// cycles: each row_valid cycle delivers one row of k values per lane
// (row[p][0..k-1]); after k rows the unit divides the k*k sum by k*k and
// presents the averages on avg with avg_valid high for one cycle, one clock
// after the last row. Division truncates toward zero (the paper does not say
// how the quotient is rounded). k may range from 1 to KMAX (8); 2 serves the
// downsample shortcut, 7 and 8 the global pooling before the classifier of
// an ImageNet (7x7) or CIFAR-10 (8x8) network. Lanes run over channels, which is this design's choice.
module avgpool_unit
  import fracbnn_pkg::*;
#(
  parameter int unsigned AP   = P,
  parameter int unsigned KMAX = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [3:0]                 k,
  input  logic                       row_valid,
  input  fx_t  [AP-1:0][KMAX-1:0]    row,
  output logic                       avg_valid,
  output fx_t  [AP-1:0]              avg
);
  logic signed [31:0] acc [AP];
  logic [3:0]         rows;
  logic signed [31:0] rsum [AP];
  logic signed [31:0] tot  [AP];
  logic               last;

  function automatic logic signed [31:0] div_kk(input logic signed [31:0] s,
                                                input logic [3:0] kk);
    case (kk)
      4'd2:    return s / 4;
      4'd3:    return s / 9;
      4'd4:    return s / 16;
      4'd5:    return s / 25;
      4'd6:    return s / 36;
      4'd7:    return s / 49;
      4'd8:    return s / 64;
      default: return s;
    endcase
  endfunction

  always_comb begin
    last = (rows + 4'd1 >= k);
    for (int p = 0; p < int'(AP); p++) begin
      rsum[p] = '0;
      for (int c = 0; c < int'(KMAX); c++)
        if (c < int'(k)) rsum[p] += 32'(row[p][c]);
      tot[p] = ((rows == '0) ? 32'sd0 : acc[p]) + rsum[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows      <= '0;
      avg_valid <= 1'b0;
      for (int p = 0; p < int'(AP); p++) begin
        acc[p] <= '0;
        avg[p] <= '0;
      end
    end else begin
      avg_valid <= 1'b0;
      if (row_valid) begin
        for (int p = 0; p < int'(AP); p++) acc[p] <= tot[p];
        if (last) begin
          rows      <= '0;
          avg_valid <= 1'b1;
          for (int p = 0; p < int'(AP); p++) avg[p] <= fx_t'(div_kk(tot[p], k));
        end else begin
          rows <= rows + 4'd1;
        end
      end
    end
  end
endmodule
