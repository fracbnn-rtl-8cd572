// tb_avgpool_unit - pools random k x k tiles (k = 1..8, two lanes) fed one
// row per cycle, sometimes with idle cycles between rows, and checks the
// average (truncated toward zero) and that avg_valid rises exactly one cycle
// after the last row and only then.
module tb_avgpool_unit;
  import fracbnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic [3:0]             k;
  logic                   row_valid, avg_valid;
  fx_t  [1:0][7:0]        row;
  fx_t  [1:0]             avg;

  avgpool_unit #(.AP(2), .KMAX(8)) dut (.clk, .rst_n, .k, .row_valid, .row, .avg_valid, .avg);

  always #5 clk = ~clk;

  initial begin
    k = 4'd2; row_valid = 0; row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int s [2];
      int kk;
      kk = (it < 8) ? it + 1 : $urandom_range(1, 8);
      s = '{0, 0};
      for (int r = 0; r < kk; r++) begin
        @(negedge clk);
        k = 4'(kk);
        row_valid = 1;
        for (int p = 0; p < 2; p++)
          for (int c = 0; c < 8; c++) begin
            row[p][c] = fx_t'($urandom_range(0, 4095)) - 16'sd2048;
            if (c < kk) s[p] += int'(row[p][c]);
          end
        @(posedge clk);
        #1;
        if (r < kk - 1) begin
          checks++;
          if (avg_valid) failures++;
          @(negedge clk);
          row_valid = 0;
          if ($urandom % 2) @(negedge clk);
        end
      end
      @(negedge clk);
      row_valid = 0;
      // one cycle after the last row
      checks++;
      if (!avg_valid) begin
        failures++;
        $display("no avg_valid for k=%0d", kk);
      end
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (int'(avg[p]) != s[p] / (kk * kk)) begin
          failures++;
          $display("k=%0d lane %0d got %0d exp %0d", kk, p, avg[p], s[p] / (kk * kk));
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
