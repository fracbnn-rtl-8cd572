// tb_frac_conv_engine - checks the fractional convolution engine.
// Part 1 replays the paper's worked example: a 4x4 map of 2-bit activations,
// a 3x3 kernel, threshold 4. The base phase must give 5 3 / 3 8, only the
// two features above 4 are updated (LSB counts 6 and 4) and the outputs must
// be 16 6 / 6 20. Part 2 uses 4 lanes of 8-bit words over 3 input words per
// pixel with random data and thresholds against a bit-level reference, and
// checks that the accumulators hold the sum one cycle after the last word.
module tb_frac_conv_engine;
  import fracbnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ---------------- part 1: one lane, one bit per word
  logic                 c1, e1, bin1;
  logic [8:0][0:0]      act1;
  logic [0:0][8:0][0:0] wgt1;
  logic [8:0]           ten1;
  logic [0:0]           len1, mask1;
  cnt_t [0:0]           om1, th1, acc1, nx1, res1;

  frac_conv_engine #(.EB(1), .EP(1), .EKK(9)) dut1 (
    .clk, .rst_n, .acc_clr(c1), .acc_en(e1), .act(act1), .tap_en(ten1),
    .wgt(wgt1), .lane_en(len1), .binary(bin1), .omsb(om1), .thresh(th1),
    .acc(acc1), .acc_nxt(nx1), .upd_mask(mask1), .result(res1)
  );

  // ---------------- part 2: four lanes, eight bits per word
  logic                 c2, e2, bin2;
  logic [8:0][7:0]      act2;
  logic [3:0][8:0][7:0] wgt2;
  logic [8:0]           ten2;
  logic [3:0]           len2, mask2;
  cnt_t [3:0]           om2, th2, acc2, nx2, res2;

  frac_conv_engine #(.EB(8), .EP(4), .EKK(9)) dut2 (
    .clk, .rst_n, .acc_clr(c2), .acc_en(e2), .act(act2), .tap_en(ten2),
    .wgt(wgt2), .lane_en(len2), .binary(bin2), .omsb(om2), .thresh(th2),
    .acc(acc2), .acc_nxt(nx2), .upd_mask(mask2), .result(res2)
  );

  int msb_map [4][4] = '{'{0,1,0,1}, '{1,0,1,0}, '{0,1,1,0}, '{1,0,0,1}};
  int lsb_map [4][4] = '{'{1,1,1,0}, '{0,1,0,1}, '{0,1,1,0}, '{1,1,1,0}};
  int kern    [3][3] = '{'{0,1,1}, '{1,1,0}, '{0,0,1}};
  int exp_base[4] = '{5, 3, 3, 8};
  int exp_out [4] = '{16, 6, 6, 20};

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    c1 = 0; e1 = 0; bin1 = 0; ten1 = '1; len1 = '1; om1 = '0; th1 = cnt_t'(4);
    c2 = 0; e2 = 0; bin2 = 0; ten2 = '1; len2 = '1; om2 = '0; th2 = '0;
    act1 = '0; wgt1 = '0; act2 = '0; wgt2 = '0;
    for (int k = 0; k < 9; k++) wgt1[0][k] = 1'(kern[k/3][k%3]);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // Part 1: worked example.
    for (int o = 0; o < 4; o++) begin
      int oy, ox;
      cnt_t base;
      oy = o / 2;
      ox = o % 2;
      @(negedge clk);
      for (int k = 0; k < 9; k++) act1[k] = 1'(msb_map[oy + k/3][ox + k%3]);
      c1 = 1; e1 = 1; len1 = 1;
      @(negedge clk);
      c1 = 0; e1 = 0;
      base = acc1[0];
      chk($sformatf("fig base %0d", o), int'(base), exp_base[o]);
      om1 = '{base};
      #1;
      chk($sformatf("fig mask %0d", o), int'(mask1[0]), (o == 0 || o == 3) ? 1 : 0);
      for (int k = 0; k < 9; k++) act1[k] = 1'(lsb_map[oy + k/3][ox + k%3]);
      c1 = 1; e1 = 1; len1 = mask1;
      @(negedge clk);
      c1 = 0; e1 = 0;
      chk($sformatf("fig out %0d", o), int'(res1[0]), exp_out[o]);
    end
    // Binary mode: the result is the base count itself.
    bin1 = 1; om1 = '{cnt_t'(8)}; #1;
    chk("binary result", int'(res1[0]), 8);
    chk("binary mask", int'(mask1[0]), 0);

    // Part 2: random, three input words per pixel.
    for (int it = 0; it < 300; it++) begin
      logic [2:0][8:0][7:0] am, al;
      logic [3:0][2:0][8:0][7:0] ww;
      logic [8:0] te;
      int rb [4], rl [4], rr [4];
      logic [3:0] m;
      te = (it % 3 == 0) ? 9'h010 : 9'($urandom);
      for (int g = 0; g < 3; g++)
        for (int k = 0; k < 9; k++) begin
          am[g][k] = 8'($urandom);
          al[g][k] = 8'($urandom);
          for (int p = 0; p < 4; p++) ww[p][g][k] = 8'($urandom);
        end
      for (int p = 0; p < 4; p++) begin
        rb[p] = 0; rl[p] = 0;
        for (int g = 0; g < 3; g++)
          for (int k = 0; k < 9; k++)
            if (te[k])
              for (int b = 0; b < 8; b++) begin
                if (am[g][k][b] == ww[p][g][k][b]) rb[p]++;
                if (al[g][k][b] == ww[p][g][k][b]) rl[p]++;
              end
      end
      // base phase
      ten2 = te;
      for (int g = 0; g < 3; g++) begin
        @(negedge clk);
        act2 = am[g];
        for (int p = 0; p < 4; p++) wgt2[p] = ww[p][g];
        c2 = (g == 0); e2 = 1; len2 = '1;
      end
      @(negedge clk);
      c2 = 0; e2 = 0;
      for (int p = 0; p < 4; p++) begin
        chk($sformatf("rand base it%0d p%0d", it, p), int'(acc2[p]), rb[p]);
        om2[p] = acc2[p];
        th2[p] = cnt_t'($urandom_range(rb[p] + 10, (rb[p] > 10) ? rb[p] - 10 : 0));
        m[p]   = rb[p] > int'(th2[p]);
      end
      #1;
      chk("rand mask", int'(mask2), int'(m));
      // update phase
      for (int g = 0; g < 3; g++) begin
        act2 = al[g];
        for (int p = 0; p < 4; p++) wgt2[p] = ww[p][g];
        c2 = (g == 0); e2 = 1; len2 = m;
        @(negedge clk);
      end
      c2 = 0; e2 = 0;
      for (int p = 0; p < 4; p++) begin
        rr[p] = 2 * rb[p] + (m[p] ? rl[p] : 0);
        chk($sformatf("rand out it%0d p%0d", it, p), int'(res2[p]), rr[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
