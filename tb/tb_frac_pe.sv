// tb_frac_pe - one PE (9 taps of 32 bits) against a bit-level reference sum
// of matching bits over the enabled taps.
module tb_frac_pe;
  logic                clk = 1'b0;
  int                  checks = 0, failures = 0;
  logic [8:0][31:0]    a, w;
  logic [8:0]          en;
  logic [8:0]          sum;

  frac_pe #(.B(32), .KK(9)) dut (.act(a), .wgt(w), .tap_en(en), .sum(sum));

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int exp;
      for (int k = 0; k < 9; k++) begin
        a[k] = $urandom;
        w[k] = (i == 0) ? a[k] : $urandom;
      end
      en  = (i == 0) ? 9'h1ff : (i == 1) ? 9'h010 : 9'($urandom);
      exp = 0;
      for (int k = 0; k < 9; k++)
        if (en[k]) for (int b = 0; b < 32; b++) if (a[k][b] == w[k][b]) exp++;
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        $display("case %0d got %0d exp %0d", i, sum, exp);
      end
      if (i == 0) begin
        checks++;
        if (sum != 9'd288) failures++;
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
