// tb_thermo_encoder - checks the thermometer encoder for every 8-bit pixel.
// R = 8 (32-bit vectors) is checked against round-half-up of p/8 with the
// ones packed at the top; R = 32 (8-bit vectors) is checked the same way and
// with the worked example of pixel 109, which must give three ones.
module tb_thermo_encoder;
  logic        clk = 1'b0;
  int          checks = 0, failures = 0;
  logic [7:0]  pixel;
  logic [31:0] tv8;
  logic [7:0]  tv32;

  thermo_encoder #(.R(8))  dut8  (.pixel(pixel), .tv(tv8));
  thermo_encoder #(.R(32)) dut32 (.pixel(pixel), .tv(tv32));

  always #5 clk = ~clk;

  function automatic logic [31:0] expect_tv(int p, int r, int l);
    int n;
    logic [31:0] v;
    n = p / r;
    if (2 * (p - n * r) >= r) n++;       // round half up
    if (n > l) n = l;
    v = '0;
    for (int i = 0; i < n; i++) v[l - 1 - i] = 1'b1;
    return v;
  endfunction

  initial begin
    for (int p = 0; p < 256; p++) begin
      pixel = 8'(p);
      #1;
      checks++;
      if (tv8 !== expect_tv(p, 8, 32)) begin
        failures++;
        $display("R=8 p=%0d got %h exp %h", p, tv8, expect_tv(p, 8, 32));
      end
      checks++;
      if (tv32 !== 8'(expect_tv(p, 32, 8))) begin
        failures++;
        $display("R=32 p=%0d got %b exp %b", p, tv32, 8'(expect_tv(p, 32, 8)));
      end
    end
    pixel = 8'd109;
    #1;
    checks++;
    if (tv32 !== 8'b1110_0000 || $countones(tv32) != 3) begin
      failures++;
      $display("pixel 109 at R=32 gave %b", tv32);
    end
    pixel = 8'd15;  #1; checks++; if (tv32 != 0) failures++;
    pixel = 8'd16;  #1; checks++; if (tv32 != 8'b1000_0000) failures++;
    pixel = 8'd255; #1; checks++; if (tv8 != 32'hffff_ffff) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
