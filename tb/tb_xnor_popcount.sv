// tb_xnor_popcount - random words against B minus the Hamming distance, plus
// the all-equal, all-different and disabled cases.
module tb_xnor_popcount;
  logic        clk = 1'b0;
  int          checks = 0, failures = 0;
  logic [31:0] a, w;
  logic        en;
  logic [5:0]  cnt;

  xnor_popcount #(.B(32)) dut (.act(a), .wgt(w), .en(en), .cnt(cnt));

  always #5 clk = ~clk;

  task automatic check(int exp);
    #1;
    checks++;
    if (int'(cnt) != exp) begin
      failures++;
      $display("a=%h w=%h en=%b got %0d exp %0d", a, w, en, cnt, exp);
    end
  endtask

  initial begin
    en = 1; a = 32'h1234_5678; w = a;  check(32);
    en = 1; a = 32'h0f0f_0f0f; w = ~a; check(0);
    en = 0; a = 32'h0; w = 32'h0;      check(0);
    for (int i = 0; i < 2000; i++) begin
      int m;
      a  = $urandom;
      w  = $urandom;
      en = ($urandom % 8) != 0;
      m  = 0;
      for (int b = 0; b < 32; b++) if (a[b] == w[b]) m++;
      check(en ? m : 0);
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
