// tb_stream_fifo - random valid/ready traffic on both sides against a
// reference queue: order and data of every beat, in_ready low exactly when
// DEPTH entries are held, and a full FIFO reached at least once.
module tb_stream_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0, fulls = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [15:0] q [$];

  stream_fifo #(.W(16), .DEPTH(4)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data
  );

  always #5 clk = ~clk;

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4) != 0;
      in_data   = 16'($urandom);
      out_ready = (i < 2000) ? (($urandom % 3) == 0) : (($urandom % 4) != 0);
      #1;
      checks++;
      if (in_ready != (q.size() < 4)) begin
        failures++;
        $display("in_ready %b with %0d held", in_ready, q.size());
      end
      if (!in_ready) fulls++;
      checks++;
      if (out_valid != (q.size() > 0)) failures++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin
          failures++;
          $display("data %h exp %h", out_data, q[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
