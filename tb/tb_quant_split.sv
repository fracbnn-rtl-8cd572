// tb_quant_split - 2-bit quantiser and plane split. Checks the level
// boundaries (-1.0, 0, +1.0 with the default step of 1.0), that the MSB is
// the sign, and random vectors against the clamp(floor(x/step)+2, 0, 3) rule.
module tb_quant_split;
  import fracbnn_pkg::*;
  logic        clk = 1'b0;
  int          checks = 0, failures = 0;
  fx_t  [3:0]  x;
  logic [3:0]  msb, lsb;

  quant_split #(.QP(4), .QSHIFT(8)) dut (.x(x), .msb(msb), .lsb(lsb));

  always #5 clk = ~clk;

  function automatic int qref(int v);
    int q;
    q = (v >= 0) ? v / 256 : -((-v + 255) / 256);   // floor
    q += 2;
    if (q < 0) q = 0;
    if (q > 3) q = 3;
    return q;
  endfunction

  task automatic chk;
    #1;
    for (int p = 0; p < 4; p++) begin
      int q;
      q = qref(int'(x[p]));
      checks++;
      if ({msb[p], lsb[p]} != 2'(q)) begin
        failures++;
        $display("x=%0d got %b%b exp %0d", x[p], msb[p], lsb[p], q);
      end
      checks++;
      if (msb[p] != (x[p] >= 0)) failures++;
    end
  endtask

  initial begin
    x = '{16'sd256, 16'sd0, -16'sd1, -16'sd257}; chk;   // 3 2 1 0
    checks++;
    if (msb != 4'b1100 || lsb != 4'b1010) begin
      failures++;
      $display("boundary case msb=%b lsb=%b", msb, lsb);
    end
    for (int i = 0; i < 3000; i++) begin
      for (int p = 0; p < 4; p++) x[p] = fx_t'($urandom_range(0, 2047)) - 16'sd1024;
      if (i % 4 == 0) x[0] = fx_t'($urandom);
      chk;
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
