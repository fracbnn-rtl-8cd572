// tb_fracbnn_top - end-to-end test of the accelerator at its default sizes
// (B = P = 32, 1000 classes, full buffer depths).
//
// The testbench plays host and off-chip memory. It runs a small network:
//   1. input layer: a 6x6 RGB image, thermometer encoded (96 binary channels,
//      3 words per pixel), binary 3x3 convolution, stride 2, 64 outputs
//      (2 weight tiles), no shortcut;
//   2. fractional 3x3 convolution, stride 1, 64 -> 32 channels, shortcut;
//   3. fractional 1x1 convolution, 32 -> 64 channels, shortcut; tile 0 has
//      thresholds no popcount can pass, so every pixel of it skips the update;
//   4. global 3x3 average pooling of layer 3's output, streamed back in;
//   5. the classifier over the 64 pooled features, 1000 classes.
// Every output beat is compared with a reference model written here from the
// layer definitions (its own thermometer code, popcounts, gating, BatchNorm,
// BPReLU, shortcut, quantiser, pooling and dot products); the next layer's
// input planes come from the reference, not from the design. Streams see
// random gaps and back-pressure; weights arrive late on purpose.
// Cycle counts checked: the base phase takes exactly one cycle per output
// pixel and input word, the update phase one per updated pixel and word.
// Each mechanism (binary layer, thermometer load, update, skipped update,
// weight wait, double-buffered weight load, output stall, stride 2, 1x1,
// shortcut, ping-pong banks in both directions, pooling, classifier) is
// counted and must have happened at least once.
module tb_fracbnn_top;
  import fracbnn_pkg::*;

  localparam int NC = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ------------------------------------------------------------- DUT
  layer_cfg_t          cfg;
  logic                start, busy, done;
  logic                ld_valid, ld_bank;
  ld_sel_e             ld_sel;
  logic [15:0]         ld_addr;
  logic [1023:0]       ld_data;
  logic                wt_req, wt_ack;
  logic [5:0]          wt_tile;
  logic                sc_valid, sc_ready;
  fx_t  [31:0]         sc_data;
  logic                out_valid, out_ready;
  fx_t  [31:0]         out_data;
  logic                cw_valid, cw_ready;
  logic signed [7:0]   cw_data [NC];
  logic [9:0]          score_addr;
  logic signed [31:0]  score_data;

  fracbnn_top dut (
    .clk, .rst_n, .cfg, .start, .busy, .done,
    .ld_valid, .ld_sel, .ld_bank, .ld_addr, .ld_data,
    .wt_req, .wt_tile, .wt_ack,
    .sc_valid, .sc_ready, .sc_data,
    .out_valid, .out_ready, .out_data,
    .cw_valid, .cw_ready, .cw_data,
    .score_addr, .score_data
  );

  // ------------------------------------------------------ reference state
  logic [31:0]  pm [2][8192];          // MSB planes as the host expects them
  logic [31:0]  pl [2][8192];          // LSB planes
  logic [31:0]  wl [4][4][9][32];      // weights of the running layer [t][g][k][p]
  chan_param_t  prm_ref [128];
  fx_t  [31:0]  exp_q [$];             // expected output beats
  fx_t  [31:0]  sc_q  [$];             // shortcut / pooling beats to send
  fx_t  [31:0]  l3_out [$];            // layer 3 results, reused for pooling
  logic signed [7:0] cw_q [$][NC];     // classifier weight rows to send
  fx_t          feat_ref [64];
  int           sc_idx = 0, out_idx = 0, cw_idx = 0;
  int           exp_upd_pix;

  // ------------------------------------------------------ mechanism counts
  int n_base = 0, n_upd_cyc = 0, n_upd = 0, n_skip = 0, n_wwait = 0, n_stall = 0;
  int n_bin = 0, n_pix = 0, n_s2 = 0, n_1x1 = 0, n_sc = 0, n_pool = 0, n_fc = 0;
  int n_bank0 = 0, n_bank1 = 0, n_dbuf = 0, n_outbp = 0;

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

  function automatic logic [31:0] therm(int p);
    int n;
    logic [31:0] v;
    n = (2 * p + 8) / 16;                 // round(p / 8), halves up
    v = '0;
    for (int i = 0; i < n && i < 32; i++) v[31 - i] = 1'b1;
    return v;
  endfunction

  function automatic int n_match(logic [31:0] a, logic [31:0] b);
    return 32 - $countones(a ^ b);
  endfunction

  function automatic fx_t post_ref(int res, fx_t sc, bit scen, chan_param_t q);
    longint y1, d, z, s;
    y1 = clamp16(longint'(q.bn1_scale) * res + longint'(q.bn1_bias));
    d  = y1 - longint'(q.alpha);
    z  = (d >= 0) ? d : flr256(longint'(q.beta) * d);
    z  = clamp16(z + longint'(q.gamma));
    s  = z + (scen ? longint'(sc) : 0);
    return fx_t'(clamp16(flr256(longint'(q.bn2_scale) * s) + longint'(q.bn2_bias)));
  endfunction

  function automatic logic [1:0] quant_ref(fx_t x);
    int q;
    q = int'(x);
    q = (q >= 0) ? q / 256 : -((-q + 255) / 256);
    q += 2;
    if (q < 0) q = 0;
    if (q > 3) q = 3;
    return 2'(q);
  endfunction

  // ------------------------------------------------------------ host I/O
  task automatic ld(ld_sel_e sel, bit bank, int addr, logic [1023:0] data);
    @(negedge clk);
    ld_valid = 1'b1;
    ld_sel   = sel;
    ld_bank  = bank;
    ld_addr  = 16'(addr);
    ld_data  = data;
  endtask

  task automatic ld_end;
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  // Weight tiles: tile t goes to bank t%2 once the engine has left tile t-2.
  task automatic feed_weights(int ntiles, int cinw);
    for (int t = 0; t < ntiles; t++) begin
      logic [1023:0] d;
      while (!(t == 0 || int'(wt_tile) >= t - 1)) @(negedge clk);
      repeat ($urandom_range(0, 30)) @(negedge clk);
      for (int g = 0; g < cinw; g++)
        for (int k = 0; k < 9; k++) begin
          d = '0;
          for (int p = 0; p < 32; p++) d[p*32 +: 32] = wl[t][g][k][p];
          ld(LD_WGT, 1'(t % 2), g * 9 + k, d);
        end
      @(negedge clk);
      ld_valid = 1'b0;
      wt_ack   = 1'b1;
      @(negedge clk);
      wt_ack   = 1'b0;
    end
  endtask

  task automatic start_op(layer_cfg_t c);
    @(negedge clk);
    cfg   = c;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
  endtask

  task automatic wait_done;
    @(posedge clk);
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  // ---------------------------------------------------- reference of a layer
  task automatic ref_conv(int bank, int h, int w, int cinw, int ct, bit k3,
                          bit s2, bit bin, bit scen, bit keep);
    int ho, wo, st;
    st = s2 ? 2 : 1;
    ho = (h - 1) / st + 1;
    wo = (w - 1) / st + 1;
    exp_upd_pix = 0;
    for (int t = 0; t < ct; t++)
      for (int pix = 0; pix < ho * wo; pix++) begin
        fx_t [31:0] beat, sc;
        logic [31:0] qm, ql;
        bit any;
        int oy, ox;
        oy = pix / wo;
        ox = pix % wo;
        any = 0;
        for (int p = 0; p < 32; p++) sc[p] = fx_t'($urandom_range(0, 1023)) - 16'sd512;
        if (scen) sc_q.push_back(sc);
        for (int p = 0; p < 32; p++) begin
          int base, lsb, res;
          bit m;
          base = 0;
          lsb  = 0;
          for (int k = 0; k < 9; k++) begin
            int iy, ix;
            if (!k3 && k != 4) continue;
            iy = oy * st + k / 3 - 1;
            ix = ox * st + k % 3 - 1;
            if (iy < 0 || ix < 0 || iy >= h || ix >= w) continue;
            for (int g = 0; g < cinw; g++) begin
              base += n_match(pm[bank][(iy * w + ix) * cinw + g], wl[t][g][k][p]);
              lsb  += n_match(pl[bank][(iy * w + ix) * cinw + g], wl[t][g][k][p]);
            end
          end
          m = !bin && (base > int'(prm_ref[t * 32 + p].thresh));
          if (m) any = 1;
          res = bin ? base : 2 * base + (m ? lsb : 0);
          beat[p] = post_ref(res, sc[p], scen, prm_ref[t * 32 + p]);
          {qm[p], ql[p]} = quant_ref(beat[p]);
        end
        if (any) exp_upd_pix++;
        exp_q.push_back(beat);
        if (keep) l3_out.push_back(beat);
        pm[1 - bank][pix * ct + t] = qm;
        pl[1 - bank][pix * ct + t] = ql;
      end
  endtask

  // Random weights and parameters for a layer; mean is the expected
  // popcount-derived result used to centre the BatchNorm; thr_mode 1 makes
  // tile 0 unreachable by the gate.
  task automatic make_layer(int ct, int cinw, int mean, int thr_mean, int thr_mode);
    for (int t = 0; t < ct; t++)
      for (int g = 0; g < cinw; g++)
        for (int k = 0; k < 9; k++)
          for (int p = 0; p < 32; p++) wl[t][g][k][p] = $urandom;
    for (int ch = 0; ch < ct * 32; ch++) begin
      chan_param_t q;
      q.bn1_scale = fx_t'($urandom_range(8, 40));
      q.bn1_bias  = fx_t'(-(int'(q.bn1_scale) * mean) + $urandom_range(0, 512) - 256);
      q.alpha     = fx_t'($urandom_range(0, 512)) - 16'sd256;
      q.beta      = fx_t'($urandom_range(0, 128));
      q.gamma     = fx_t'($urandom_range(0, 512)) - 16'sd256;
      q.bn2_scale = fx_t'($urandom_range(128, 512));
      q.bn2_bias  = fx_t'($urandom_range(0, 512)) - 16'sd256;
      if (thr_mode == 1 && ch < 32) q.thresh = cnt_t'(16'hffff);
      else q.thresh = cnt_t'(thr_mean + int'($urandom_range(0, 40)) - 20);
      prm_ref[ch] = q;
    end
  endtask

  task automatic load_params(int nch);
    for (int ch = 0; ch < nch; ch++) ld(LD_PRM, 1'b0, ch, 1024'(prm_ref[ch]));
    ld_end();
  endtask

  task automatic run_conv(int bank, int h, int w, int cinw, int ct, bit k3, bit s2,
                          bit bin, bit scen, bit keep);
    layer_cfg_t c;
    int base0, upd0, ho, wo;
    ho = (h - 1) / (s2 ? 2 : 1) + 1;
    wo = (w - 1) / (s2 ? 2 : 1) + 1;
    load_params(ct * 32);
    ref_conv(bank, h, w, cinw, ct, k3, s2, bin, scen, keep);
    c = '0;
    c.op = OP_CONV; c.binary = bin; c.k3 = k3; c.stride2 = s2; c.sc_en = scen;
    c.rd_bank = 1'(bank); c.h = 8'(h); c.w = 8'(w); c.cinw = 6'(cinw);
    c.cout_tiles = 6'(ct);
    base0 = n_base;
    upd0  = n_upd_cyc;
    start_op(c);
    fork
      feed_weights(ct, cinw);
      wait_done();
    join
    checks++;
    if (n_base - base0 != ct * ho * wo * cinw) begin
      failures++;
      $display("base phase took %0d cycles, expected %0d", n_base - base0, ct * ho * wo * cinw);
    end
    checks++;
    if (n_upd_cyc - upd0 != exp_upd_pix * cinw) begin
      failures++;
      $display("update phase took %0d cycles, expected %0d", n_upd_cyc - upd0, exp_upd_pix * cinw);
    end
    checks++;
    if (out_idx != exp_q.size()) begin
      failures++;
      $display("layer ended with %0d of %0d outputs", out_idx, exp_q.size());
    end
  endtask

  // ------------------------------------------------------------- streams
  always @(posedge clk) if (rst_n) begin
    if (sc_valid && sc_ready) sc_idx++;
    if (cw_valid && cw_ready) cw_idx++;
    if (out_valid && !out_ready) n_outbp++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_idx >= exp_q.size()) begin
        failures++;
        $display("unexpected output beat %0d", out_idx);
      end else if (out_data !== exp_q[out_idx]) begin
        failures++;
        if (failures < 10)
          for (int p = 0; p < 32; p++)
            if (out_data[p] != exp_q[out_idx][p])
              $display("beat %0d lane %0d: got %0d exp %0d", out_idx, p, out_data[p],
                       exp_q[out_idx][p]);
      end
      out_idx++;
    end
  end

  always @(negedge clk) begin
    out_ready = ($urandom % 4) != 0;
    sc_valid  = (sc_idx < sc_q.size()) && (($urandom % 3) != 0);
    sc_data   = (sc_idx < sc_q.size()) ? sc_q[sc_idx] : '0;
    cw_valid  = (cw_idx < cw_q.size()) && (($urandom % 3) != 0);
    if (cw_idx < cw_q.size()) cw_data = cw_q[cw_idx];
  end

  // --------------------------------------------------- mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.state == dut.S_BASE) n_base++;
    if (dut.state == dut.S_UPD) n_upd_cyc++;
    if (dut.state == dut.S_UCHK && (|dut.upd_mask)) n_upd++;
    if (dut.state == dut.S_UCHK && !(|dut.upd_mask) && !dut.c.binary) n_skip++;
    if (dut.state == dut.S_WWAIT && !wt_req) failures++;
    if (dut.state == dut.S_WWAIT && !(dut.tiles_loaded > dut.t)) n_wwait++;
    if (dut.state == dut.S_POST && !dut.post_fire) n_stall++;
    if (dut.state == dut.S_POST && dut.post_fire) begin
      if (dut.c.binary) n_bin++;
      if (dut.c.stride2) n_s2++;
      if (!dut.c.k3) n_1x1++;
      if (dut.c.sc_en) n_sc++;
      if (dut.c.rd_bank) n_bank1++; else n_bank0++;
    end
    if (dut.state == dut.S_POOL && dut.avg_valid) n_pool++;
    if (dut.state == dut.S_FC && cw_valid && cw_ready) n_fc++;
    if (ld_valid && ld_sel == LD_PIX && !busy) n_pix++;
    if (ld_valid && ld_sel == LD_WGT && busy && !wt_req) n_dbuf++;
  end

  // ------------------------------------------------------------- sequence
  initial begin
    layer_cfg_t c;
    logic [7:0] img [36][3];
    cfg = '0; start = 0; ld_valid = 0; ld_sel = LD_WGT; ld_bank = 0; ld_addr = '0;
    ld_data = '0; wt_ack = 0; sc_valid = 0; sc_data = '0; out_ready = 1;
    cw_valid = 0; score_addr = '0;
    for (int i = 0; i < NC; i++) cw_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Layer 1: thermometer-encoded 6x6 RGB image into bank 0.
    for (int pix = 0; pix < 36; pix++)
      for (int ch = 0; ch < 3; ch++) begin
        img[pix][ch] = 8'($urandom);
        if (pix == 0) img[pix][ch] = (ch == 0) ? 8'd0 : (ch == 1) ? 8'd255 : 8'd12;
        pm[0][pix * 3 + ch] = therm(int'(img[pix][ch]));
        pl[0][pix * 3 + ch] = '0;
        ld(LD_PIX, 1'b0, pix * 3 + ch, 1024'(img[pix][ch]));
      end
    ld_end();
    make_layer(2, 3, 9 * 48, 0, 0);
    run_conv(0, 6, 6, 3, 2, 1'b1, 1'b1, 1'b1, 1'b0, 1'b0);
    $display("layer 1 done: %0d outputs", out_idx);

    // Layer 2: fractional 3x3, 3x3 map, 64 -> 32 channels, bank 1 -> 0.
    make_layer(1, 2, 3 * 9 * 32, 9 * 32 + 2, 0);
    run_conv(1, 3, 3, 2, 1, 1'b1, 1'b0, 1'b0, 1'b1, 1'b0);
    $display("layer 2 done: %0d outputs", out_idx);

    // Layer 3: fractional 1x1, 32 -> 64 channels, bank 0 -> 1.
    make_layer(2, 1, 3 * 16, 16, 1);
    run_conv(0, 3, 3, 1, 2, 1'b0, 1'b0, 1'b0, 1'b1, 1'b1);
    $display("layer 3 done: %0d outputs", out_idx);

    // Global 3x3 average pooling of layer 3's 64 channels.
    for (int n = 0; n < 2; n++) begin
      fx_t [31:0] a;
      for (int p = 0; p < 32; p++) begin
        int s;
        s = 0;
        for (int pix = 0; pix < 9; pix++) s += int'(l3_out[n * 9 + pix][p]);
        a[p] = fx_t'(s / 9);
        feat_ref[n * 32 + p] = a[p];
      end
      for (int pix = 0; pix < 9; pix++) sc_q.push_back(l3_out[n * 9 + pix]);
      exp_q.push_back(a);
    end
    c = '0;
    c.op = OP_POOL; c.pool_k = 4'd3; c.pool_n = 11'd2;
    start_op(c);
    wait_done();
    checks++;
    if (out_idx != exp_q.size() || sc_idx != sc_q.size()) begin
      failures++;
      $display("pooling: %0d/%0d outputs, %0d/%0d inputs", out_idx, exp_q.size(),
               sc_idx, sc_q.size());
    end

    // Classifier: 64 features x 1000 classes.
    begin
      longint sref [NC];
      for (int cl = 0; cl < NC; cl++) sref[cl] = 0;
      for (int i = 0; i < 64; i++) begin
        logic signed [7:0] row [NC];
        for (int cl = 0; cl < NC; cl++) begin
          row[cl] = 8'($urandom);
          sref[cl] += longint'(feat_ref[i]) * longint'(row[cl]);
        end
        cw_q.push_back(row);
      end
      c = '0;
      c.op = OP_FC; c.fc_nfeat = 11'd64;
      start_op(c);
      wait_done();
      for (int cl = 0; cl < NC; cl++) begin
        @(negedge clk);
        score_addr = 10'(cl);
        #1;
        checks++;
        if (longint'(score_data) != sref[cl]) begin
          failures++;
          if (failures < 10) $display("class %0d score %0d exp %0d", cl, score_data, sref[cl]);
        end
      end
    end

    // Every mechanism must have happened.
    $display("mechanisms: thermo_loads=%0d binary_px=%0d updates=%0d skips=%0d wwait=%0d dbuf=%0d",
             n_pix, n_bin, n_upd, n_skip, n_wwait, n_dbuf);
    $display("            post_stall=%0d out_backpressure=%0d stride2=%0d 1x1=%0d shortcut=%0d",
             n_stall, n_outbp, n_s2, n_1x1, n_sc);
    $display("            bank0_reads=%0d bank1_reads=%0d pool=%0d fc_rows=%0d",
             n_bank0, n_bank1, n_pool, n_fc);
    begin
      int m [15];
      m = '{n_pix, n_bin, n_upd, n_skip, n_wwait, n_dbuf, n_stall, n_outbp,
            n_s2, n_1x1, n_sc, n_bank0, n_bank1, n_pool, n_fc};
      for (int i = 0; i < 15; i++) begin
        checks++;
        if (m[i] == 0) begin
          failures++;
          $display("mechanism %0d never happened", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
