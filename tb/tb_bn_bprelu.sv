// tb_bn_bprelu - hand-worked cases on both sides of the BPReLU kink, then
// random inputs against an integer reference (floor for the negative-slope
// product, saturation to 16 bits).
module tb_bn_bprelu;
  import fracbnn_pkg::*;
  logic        clk = 1'b0;
  int          checks = 0, failures = 0;
  cnt_t        x;
  chan_param_t prm;
  fx_t         y;

  bn_bprelu dut (.x(x), .prm(prm), .y(y));

  always #5 clk = ~clk;

  function automatic longint clamp16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic longint flr256(longint v);
    longint q;
    q = v / 256;
    if (v < 0 && q * 256 != v) q--;
    return q;
  endfunction

  task automatic chk(longint exp);
    #1;
    checks++;
    if (longint'(y) != exp) begin
      failures++;
      $display("x=%0d s=%0d b=%0d a=%0d be=%0d g=%0d: got %0d exp %0d", x,
               prm.bn1_scale, prm.bn1_bias, prm.alpha, prm.beta, prm.gamma, y, exp);
    end
  endtask

  initial begin
    prm = '0;
    // scale 1.0, alpha 2.0: x=10 -> y=10.0, above the kink: 8.0
    prm.bn1_scale = 16'sd256; prm.alpha = 16'sd512; x = 10; chk(2048);
    // x=1 -> 1.0, d=-4.0, slope 0.25 -> -1.0, gamma 0.5 -> -0.5
    prm.alpha = 16'sd1280; prm.beta = 16'sd64; prm.gamma = 16'sd128; x = 1; chk(-128);
    // saturation: scale 127.0 x 400
    prm = '0; prm.bn1_scale = 16'sh7f00; x = 400; chk(32767);
    for (int i = 0; i < 5000; i++) begin
      longint y1, d, z;
      x = cnt_t'($urandom_range(0, 600));
      prm.bn1_scale = fx_t'($urandom_range(0, 1023)) - 16'sd512;
      prm.bn1_bias  = fx_t'($urandom);
      prm.alpha     = fx_t'($urandom);
      prm.beta      = fx_t'($urandom_range(0, 511)) - 16'sd256;
      prm.gamma     = fx_t'($urandom);
      y1 = clamp16(longint'(prm.bn1_scale) * longint'(x) + longint'(prm.bn1_bias));
      d  = y1 - longint'(prm.alpha);
      z  = (d >= 0) ? d : flr256(longint'(prm.beta) * d);
      chk(clamp16(z + longint'(prm.gamma)));
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
