// stream_fifo - synchronous FIFO with valid/ready handshakes on both sides.
//
// Serves as the output feature-map buffer in front of the write stream to
// off-chip memory: results are pushed when in_valid && in_ready and leave
// when out_valid && out_ready. in_ready is low only when all DEPTH entries are
// full; out_valid is high whenever an entry is held. A push and a pop may
// happen in the same cycle. Depth and handshake are this design's choice.
module stream_fifo #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wr_ptr] <= in_data;

  // The fill count never exceeds the depth.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));
endmodule
