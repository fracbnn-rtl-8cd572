// tb_classifier - feeds random feature vectors with random signed weights to
// 10 class lanes and compares every score with a reference dot product; also
// checks that clr restarts the sums and that idle cycles change nothing.
module tb_classifier;
  import fracbnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic clr, in_valid;
  fx_t  feat;
  logic signed [7:0]  w     [10];
  logic signed [31:0] score [10];

  classifier #(.NCLASS(10), .CWW(8), .ACCW(32)) dut (.clk, .rst_n, .clr, .in_valid, .feat, .w, .score);

  always #5 clk = ~clk;

  initial begin
    clr = 0; in_valid = 0; feat = '0;
    for (int c = 0; c < 10; c++) w[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 20; v++) begin
      longint ref_s [10];
      int n;
      n = $urandom_range(1, 64);
      for (int c = 0; c < 10; c++) ref_s[c] = 0;
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int i = 0; i < n; i++) begin
        feat = fx_t'($urandom);
        for (int c = 0; c < 10; c++) begin
          w[c] = 8'($urandom);
          ref_s[c] += longint'(feat) * longint'(w[c]);
        end
        in_valid = 1;
        @(negedge clk);
        in_valid = ($urandom % 3) == 0 ? 0 : 1;
        if (!in_valid) begin
          feat = fx_t'($urandom);
          @(negedge clk);
        end
        in_valid = 0;
      end
      for (int c = 0; c < 10; c++) begin
        checks++;
        if (longint'(score[c]) != ref_s[c]) begin
          failures++;
          $display("vec %0d class %0d got %0d exp %0d", v, c, score[c], ref_s[c]);
        end
      end
    end
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
