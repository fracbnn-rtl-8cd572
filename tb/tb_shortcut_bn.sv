// tb_shortcut_bn - residual add and BatchNorm: hand-worked cases with and
// without the shortcut, then random values against an integer reference.
module tb_shortcut_bn;
  import fracbnn_pkg::*;
  logic        clk = 1'b0;
  int          checks = 0, failures = 0;
  fx_t         z, sc, y;
  logic        sc_en;
  chan_param_t prm;

  shortcut_bn dut (.z(z), .sc(sc), .sc_en(sc_en), .prm(prm), .y(y));

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
      $display("z=%0d sc=%0d en=%0d: got %0d exp %0d", z, sc, sc_en, y, exp);
    end
  endtask

  initial begin
    prm = '0;
    // (1.5 + 2.0) * 2.0 + 0.25 = 7.25
    z = 16'sd384; sc = 16'sd512; sc_en = 1;
    prm.bn2_scale = 16'sd512; prm.bn2_bias = 16'sd64; chk(1856);
    sc_en = 0; chk(832);                 // 1.5 * 2.0 + 0.25 = 3.25
    for (int i = 0; i < 5000; i++) begin
      longint s;
      z = fx_t'($urandom); sc = fx_t'($urandom); sc_en = 1'($urandom);
      prm.bn2_scale = fx_t'($urandom_range(0, 2047)) - 16'sd1024;
      prm.bn2_bias  = fx_t'($urandom);
      s = longint'(z) + (sc_en ? longint'(sc) : 0);
      chk(clamp16(flr256(longint'(prm.bn2_scale) * s) + longint'(prm.bn2_bias)));
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
