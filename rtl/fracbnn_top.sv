// fracbnn_top - FracBNN accelerator: binary and fractional convolution,
// post-processing, average pooling and the linear classifier.
//
// What it computes. A fractional convolution layer has 2-bit activations and
// 1-bit weights. Its base phase is an ordinary binary convolution of the
// activation MSBs (XNOR + popcount), giving O_MSB. Only output features whose
// O_MSB is above a per-channel threshold are refined in the update phase by a
// second binary convolution of the LSBs, O_LSB, and become
// (O_MSB << 1) + O_LSB; the others become O_MSB << 1. The input layer is a
// plain binary convolution of the thermometer-encoded image (base phase only).
// Each result is normalised (BatchNorm), passed through the biased PReLU,
// added to its shortcut, normalised again, sent out to off-chip memory and,
// quantised to 2 bits and split into MSB and LSB, written into the other
// ping-pong bank as the input of the next layer.
//
// Organisation (after the paper's accelerator figure):
//   - MSB and LSB planes, two banks each (fmap_ram, B-bit words holding B
//     channels of one pixel, word address = pixel * Cin/B + word);
//   - weight buffer, two banks of one output tile each (P lanes x 9 taps);
//   - frac_conv_engine: P PEs, each a fully unrolled 3x3 window of B-bit
//     XNOR-popcounts, so one cycle handles one pixel, B input channels and
//     P output channels;
//   - popcount buffer holding O_MSB of the tile between the two phases;
//   - bn_bprelu, shortcut_bn, quant_split per lane; an output FIFO;
//   - the input path: pixels written by the host are thermometer encoded
//     and multiplexed with the quantiser output into the MSB plane;
//   - avgpool_unit and classifier;
//   - the control state machine below.
//
// Layer schedule (OP_CONV), following the paper's algorithm with P output
// channels at a time: for each output tile t, wait for its weights (wt_req /
// wt_ack); base phase: every output pixel x every input word, one cycle each;
// update phase: per output pixel, one check cycle, then Cin/B cycles only if
// at least one of the P lanes passed its threshold (otherwise the pixel is
// skipped), then one output cycle in which the shortcut is taken from
// sc_* and the result is pushed into the output FIFO. Back-pressure on either
// stream stalls the output cycle. Out-of-map taps count no matches (zero
// padding of the +-1 map); output size is (H-1)/stride + 1.
// OP_POOL reads k x k tiles from sc_* (row by row, P channels per beat),
// averages them and sends the averages out; they are also kept as the
// classifier's input features (vector n -> features n*P .. n*P+P-1).
// OP_FC takes one row of NCLASS weights per cw_* beat and accumulates all
// class scores in parallel; they are read through score_addr / score_data.
//
// Host interface (the CPU and DMA of the paper's system): cfg and a start
// pulse; busy and a done pulse; a write port (ld_*) into the on-chip buffers,
// which may only write weights while busy (double buffering); valid/ready
// streams for shortcuts and pooling input (sc_*), results (out_*) and
// classifier weights (cw_*). The paper does not define these interfaces; they
// and the fixed-point formats are this design's own. P must equal B, so an
// output tile is exactly one word of the next layer.
module fracbnn_top
  import fracbnn_pkg::*;
#(
  parameter int unsigned BW          = B,
  parameter int unsigned PL          = P,
  parameter int unsigned R           = 8,
  parameter int unsigned FM_DEPTH    = 8192,
  parameter int unsigned MAX_PIX     = 1024,
  parameter int unsigned CINW_MAX    = 32,
  parameter int unsigned COUT_MAX    = 1024,
  parameter int unsigned FEAT_MAX    = 1024,
  parameter int unsigned NCLASS      = 1000,
  parameter int unsigned CWW         = 8,
  parameter int unsigned ACCW        = 32,
  parameter int unsigned KMAX        = 8,
  parameter int unsigned QSHIFT      = 8,
  parameter int unsigned OFIFO_DEPTH = 16,
  parameter int unsigned LDW         = (PL * BW > 128) ? PL * BW : 128
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // control
  input  layer_cfg_t                   cfg,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // buffer write port
  input  logic                         ld_valid,
  input  ld_sel_e                      ld_sel,
  input  logic                         ld_bank,
  input  logic [15:0]                  ld_addr,
  input  logic [LDW-1:0]               ld_data,
  // weight tile handshake
  output logic                         wt_req,
  output logic [5:0]                   wt_tile,
  input  logic                         wt_ack,
  // shortcut / pooling input stream
  input  logic                         sc_valid,
  output logic                         sc_ready,
  input  fx_t  [PL-1:0]                sc_data,
  // output feature stream
  output logic                         out_valid,
  input  logic                         out_ready,
  output fx_t  [PL-1:0]                out_data,
  // classifier weight stream
  input  logic                         cw_valid,
  output logic                         cw_ready,
  input  logic signed [CWW-1:0]        cw_data [NCLASS],
  // classifier scores
  input  logic [$clog2(NCLASS)-1:0]    score_addr,
  output logic signed [ACCW-1:0]       score_data
);
  localparam int unsigned FAW  = $clog2(FM_DEPTH);
  localparam int unsigned WDEP = KK * CINW_MAX;          // entries per weight bank
  localparam int unsigned WAW  = $clog2(2 * WDEP);
  localparam int unsigned PAW  = $clog2(MAX_PIX);
  localparam int unsigned NT   = (COUT_MAX + PL - 1) / PL;
  localparam int unsigned L    = (255 + R - 1) / R;

  if (PL != BW) begin : g_bad_pb
    $error("fracbnn_top: P must equal B");
  end
  if (L > BW) begin : g_bad_r
    $error("fracbnn_top: thermometer vector longer than a word");
  end

  typedef enum logic [3:0] {
    S_IDLE, S_WWAIT, S_BASE, S_UCHK, S_UPD, S_POST, S_POOL, S_FC, S_FIN
  } state_e;

  state_e      state;
  layer_cfg_t  c;
  logic [5:0]  t, g, tiles_loaded;
  logic [7:0]  oy, ox;
  logic [15:0] pix;
  logic [7:0]  ho, wo;
  logic [15:0] npix;
  logic        last_g, last_pix;

  assign ho       = 8'(((c.h - 8'd1) >> c.stride2) + 8'd1);
  assign wo       = 8'(((c.w - 8'd1) >> c.stride2) + 8'd1);
  assign npix     = 16'(ho) * 16'(wo);
  assign last_g   = (g == c.cinw - 6'd1);
  assign last_pix = (pix == npix - 16'd1);
  assign busy     = (state != S_IDLE);

  // ---------------------------------------------------------------- window
  logic [KK-1:0]           tap_en;
  logic [KK-1:0][FAW-1:0]  fm_raddr;
  logic [KK-1:0][WAW-1:0]  w_raddr;

  always_comb begin
    for (int k = 0; k < int'(KK); k++) begin
      int iy, ix;
      iy = int'(oy) * (c.stride2 ? 2 : 1) + k / 3 - 1;
      ix = int'(ox) * (c.stride2 ? 2 : 1) + k % 3 - 1;
      tap_en[k] = (c.k3 || k == 4) && iy >= 0 && ix >= 0 &&
                  iy < int'(c.h) && ix < int'(c.w);
      fm_raddr[k] = tap_en[k] ? FAW'((iy * int'(c.w) + ix) * int'(c.cinw) + int'(g)) : '0;
      w_raddr[k]  = WAW'(int'(t[0]) * int'(WDEP) + int'(g) * int'(KK) + k);
    end
  end

  // ------------------------------------------------------ MSB / LSB planes
  logic [BW-1:0]          thermo_word;
  logic [1:0]             msb_we, lsb_we;
  logic [FAW-1:0]         fm_waddr;
  logic [BW-1:0]          msb_wdata, lsb_wdata;
  logic [KK-1:0][BW-1:0]  msb_rd [2];
  logic [KK-1:0][BW-1:0]  lsb_rd [2];
  logic [KK-1:0][BW-1:0]  act;
  logic                   post_fire;
  logic [PL-1:0]          q_msb, q_lsb;

  thermo_encoder #(.R(R), .L(L)) u_thermo (
    .pixel(ld_data[7:0]), .tv(thermo_word[L-1:0])
  );
  if (L < BW) begin : g_thermo_pad
    assign thermo_word[BW-1:L] = '0;
  end

  // Write-side multiplexer: host load path (thermometer-encoded input image
  // or raw words) or the quantised output of the running layer.
  always_comb begin
    msb_we    = '0;
    lsb_we    = '0;
    fm_waddr  = FAW'(ld_addr);
    msb_wdata = (ld_sel == LD_PIX) ? thermo_word : ld_data[BW-1:0];
    lsb_wdata = ld_data[BW-1:0];
    if (state == S_POST) begin
      fm_waddr  = FAW'(int'(pix) * int'(c.cout_tiles) + int'(t));
      msb_wdata = BW'(q_msb);
      lsb_wdata = BW'(q_lsb);
      msb_we[!c.rd_bank] = post_fire;
      lsb_we[!c.rd_bank] = post_fire;
    end else if (ld_valid && !busy) begin
      msb_we[ld_bank] = (ld_sel == LD_PIX) || (ld_sel == LD_MSB);
      lsb_we[ld_bank] = (ld_sel == LD_LSB);
    end
  end

  for (genvar bk = 0; bk < 2; bk++) begin : g_bank
    fmap_ram #(.W(BW), .DEPTH(FM_DEPTH), .NRD(KK)) u_msb (
      .clk, .we(msb_we[bk]), .waddr(fm_waddr), .wdata(msb_wdata),
      .raddr(fm_raddr), .rdata(msb_rd[bk])
    );
    fmap_ram #(.W(BW), .DEPTH(FM_DEPTH), .NRD(KK)) u_lsb (
      .clk, .we(lsb_we[bk]), .waddr(fm_waddr), .wdata(lsb_wdata),
      .raddr(fm_raddr), .rdata(lsb_rd[bk])
    );
  end

  assign act = (state == S_UPD) ? lsb_rd[c.rd_bank] : msb_rd[c.rd_bank];

  // --------------------------------------------------------- weight buffer
  logic [KK-1:0][PL*BW-1:0]      w_rd;
  logic [PL-1:0][KK-1:0][BW-1:0] wgt;

  fmap_ram #(.W(PL * BW), .DEPTH(2 * WDEP), .NRD(KK)) u_wbuf (
    .clk, .we(ld_valid && ld_sel == LD_WGT),
    .waddr(WAW'(int'(ld_bank) * int'(WDEP) + int'(ld_addr))),
    .wdata(ld_data[PL*BW-1:0]), .raddr(w_raddr), .rdata(w_rd)
  );

  always_comb
    for (int p = 0; p < int'(PL); p++)
      for (int k = 0; k < int'(KK); k++)
        wgt[p][k] = w_rd[k][p*BW +: BW];

  // ---------------------------------------------------- channel parameters
  localparam int unsigned NTW = (NT > 1) ? $clog2(NT) : 1;
  chan_param_t           prm [NT][PL];
  logic [NTW-1:0]        ti;                // t as an index into prm

  assign ti = NTW'(t);
  cnt_t [PL-1:0]         thresh;

  always_ff @(posedge clk)
    if (ld_valid && !busy && ld_sel == LD_PRM)
      prm[int'(ld_addr) / int'(PL)][int'(ld_addr) % int'(PL)] <= chan_param_t'(ld_data[127:0]);

  always_comb
    for (int p = 0; p < int'(PL); p++) thresh[p] = prm[ti][p].thresh;

  // ------------------------------------------------------------ the engine
  logic                 acc_clr, acc_en;
  logic [PL-1:0]        lane_en, upd_mask;
  logic [PL-1:0]        mask_q;
  cnt_t [PL-1:0]        acc, acc_nxt, result, omsb;
  logic [0:0][PL*CNTW-1:0] pb_rd;

  frac_conv_engine #(.EB(BW), .EP(PL), .EKK(KK)) u_engine (
    .clk, .rst_n, .acc_clr, .acc_en, .act, .tap_en, .wgt, .lane_en,
    .binary(c.binary), .omsb, .thresh, .acc, .acc_nxt, .upd_mask, .result
  );

  always_comb begin
    acc_clr = 1'b0;
    acc_en  = 1'b0;
    lane_en = '1;
    if (state == S_BASE) begin
      acc_clr = (g == '0);
      acc_en  = 1'b1;
    end else if (state == S_UPD) begin
      acc_clr = (g == '0);
      acc_en  = 1'b1;
      lane_en = mask_q;
    end
  end

  // O_MSB of the tile, written at the last input word of each pixel.
  fmap_ram #(.W(PL * CNTW), .DEPTH(MAX_PIX), .NRD(1)) u_pbuf (
    .clk, .we(state == S_BASE && last_g), .waddr(PAW'(pix)),
    .wdata(acc_nxt), .raddr(PAW'(pix)), .rdata(pb_rd)
  );
  assign omsb = pb_rd[0];

  // ------------------------------------------------------- post-processing
  fx_t [PL-1:0] z, post;

  for (genvar p = 0; p < PL; p++) begin : g_post
    bn_bprelu u_bnact (.x(result[p]), .prm(prm[ti][p]), .y(z[p]));
    shortcut_bn u_sc (.z(z[p]), .sc(sc_data[p]), .sc_en(c.sc_en),
                      .prm(prm[ti][p]), .y(post[p]));
  end

  quant_split #(.QP(PL), .QSHIFT(QSHIFT)) u_quant (.x(post), .msb(q_msb), .lsb(q_lsb));

  // ------------------------------------------------------------ pooling
  logic                    fifo_in_valid, fifo_in_ready;
  fx_t [PL-1:0]            fifo_in_data;
  logic [3:0]              pcol;
  logic [10:0]             pool_cnt;
  fx_t  [PL-1:0][KMAX-1:0] prow_q, prow;
  logic                    prow_valid, pool_beat;
  logic                    avg_valid, hold_valid;
  fx_t  [PL-1:0]           avg, hold;
  fx_t                     feat [FEAT_MAX];

  assign pool_beat  = (state == S_POOL) && sc_valid && sc_ready;
  assign prow_valid = pool_beat && (pcol + 4'd1 >= c.pool_k);

  always_comb
    for (int p = 0; p < int'(PL); p++)
      for (int k = 0; k < int'(KMAX); k++)
        prow[p][k] = (4'(k) == pcol) ? sc_data[p] : prow_q[p][k];

  avgpool_unit #(.AP(PL), .KMAX(KMAX)) u_pool (
    .clk, .rst_n, .k(c.pool_k), .row_valid(prow_valid), .row(prow),
    .avg_valid, .avg
  );

  // ---------------------------------------------------------- classifier
  logic [10:0]                 fidx;
  logic                        fc_clr, fc_beat;
  logic signed [ACCW-1:0]      score [NCLASS];

  assign fc_beat = (state == S_FC) && cw_valid;
  assign fc_clr  = (state == S_IDLE) && start && cfg.op == OP_FC;
  assign cw_ready = (state == S_FC);

  classifier #(.NCLASS(NCLASS), .CWW(CWW), .ACCW(ACCW)) u_fc (
    .clk, .rst_n, .clr(fc_clr), .in_valid(fc_beat),
    .feat(feat[int'(fidx) % int'(FEAT_MAX)]), .w(cw_data), .score
  );
  assign score_data = score[score_addr];

  // ------------------------------------------------------------ streams
  always_comb begin
    if (state == S_POOL) begin
      sc_ready      = !hold_valid && !avg_valid && (pool_cnt < c.pool_n);
      fifo_in_valid = hold_valid;
      fifo_in_data  = hold;
    end else begin
      sc_ready      = (state == S_POST) && c.sc_en && fifo_in_ready;
      fifo_in_valid = (state == S_POST) && (!c.sc_en || sc_valid);
      fifo_in_data  = post;
    end
  end
  assign post_fire = (state == S_POST) && fifo_in_valid && fifo_in_ready;

  stream_fifo #(.W(PL * FXW), .DEPTH(OFIFO_DEPTH)) u_ofifo (
    .clk, .rst_n, .in_valid(fifo_in_valid), .in_ready(fifo_in_ready),
    .in_data(fifo_in_data), .out_valid, .out_ready, .out_data(out_data)
  );

  assign wt_req  = (state == S_WWAIT);
  assign wt_tile = t;

  // ------------------------------------------------------- state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      c            <= '0;
      t            <= '0;
      g            <= '0;
      pix          <= '0;
      oy           <= '0;
      ox           <= '0;
      tiles_loaded <= '0;
      mask_q       <= '0;
      done         <= 1'b0;
      pcol         <= '0;
      pool_cnt     <= '0;
      prow_q       <= '0;
      hold_valid   <= 1'b0;
      hold         <= '0;
      fidx         <= '0;
    end else begin
      done <= 1'b0;
      if (wt_ack && busy) tiles_loaded <= tiles_loaded + 6'd1;

      unique case (state)
        S_IDLE: if (start) begin
          c            <= cfg;
          t            <= '0;
          g            <= '0;
          pix          <= '0;
          oy           <= '0;
          ox           <= '0;
          tiles_loaded <= '0;
          pcol         <= '0;
          pool_cnt     <= '0;
          fidx         <= '0;
          unique case (cfg.op)
            OP_POOL: state <= S_POOL;
            OP_FC:   state <= S_FC;
            default: state <= S_WWAIT;
          endcase
        end

        S_WWAIT: if (tiles_loaded > t) begin
          state <= S_BASE;
          g     <= '0;
          pix   <= '0;
          oy    <= '0;
          ox    <= '0;
        end

        // Base phase: MSB plane, every output pixel, every input word.
        S_BASE: begin
          if (!last_g) g <= g + 6'd1;
          else begin
            g <= '0;
            if (last_pix) begin
              state <= S_UCHK;
              pix   <= '0;
              oy    <= '0;
              ox    <= '0;
            end else begin
              pix <= pix + 16'd1;
              if (ox == wo - 8'd1) begin
                ox <= '0;
                oy <= oy + 8'd1;
              end else ox <= ox + 8'd1;
            end
          end
        end

        // Gate check: refine the pixel only if some lane passed its threshold.
        S_UCHK: begin
          mask_q <= upd_mask;
          g      <= '0;
          state  <= (|upd_mask) ? S_UPD : S_POST;
        end

        // Update phase: LSB plane, gated lanes only.
        S_UPD: begin
          if (!last_g) g <= g + 6'd1;
          else begin
            g     <= '0;
            state <= S_POST;
          end
        end

        S_POST: if (post_fire) begin
          if (last_pix) begin
            pix <= '0;
            oy  <= '0;
            ox  <= '0;
            if (t == c.cout_tiles - 6'd1) state <= S_FIN;
            else begin
              t     <= t + 6'd1;
              state <= S_WWAIT;
            end
          end else begin
            pix   <= pix + 16'd1;
            state <= S_UCHK;
            if (ox == wo - 8'd1) begin
              ox <= '0;
              oy <= oy + 8'd1;
            end else ox <= ox + 8'd1;
          end
        end

        S_POOL: begin
          if (pool_beat) begin
            prow_q <= prow;
            pcol   <= prow_valid ? 4'd0 : pcol + 4'd1;
          end
          if (avg_valid) begin
            hold_valid <= 1'b1;
            hold       <= avg;
            pool_cnt   <= pool_cnt + 11'd1;
          end else if (hold_valid && fifo_in_ready) begin
            hold_valid <= 1'b0;
          end
          if (!hold_valid && !avg_valid && pool_cnt == c.pool_n) state <= S_FIN;
        end

        S_FC: if (fc_beat) begin
          fidx <= fidx + 11'd1;
          if (fidx == c.fc_nfeat - 11'd1) state <= S_FIN;
        end

        // Finish when every result has left through the output stream.
        S_FIN: if (!out_valid) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // Pooled averages are kept as classifier features.
  always_ff @(posedge clk)
    if (state == S_POOL && avg_valid)
      for (int p = 0; p < int'(PL); p++)
        if (int'(pool_cnt) * int'(PL) + p < int'(FEAT_MAX))
          feat[int'(pool_cnt) * int'(PL) + p] <= avg[p];

  // ------------------------------------------------------------ checks
  a_ld_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ld_valid && busy |-> ld_sel == LD_WGT)
    else $error("only weights may be loaded while a layer runs");
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    start && !busy && cfg.op == OP_CONV |->
      cfg.cinw != 0 && int'(cfg.cinw) <= int'(CINW_MAX) && cfg.cout_tiles != 0 &&
      int'(cfg.cout_tiles) <= int'(NT) && cfg.h != 0 && cfg.w != 0);
  a_npix: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_BASE |-> int'(npix) <= int'(MAX_PIX) &&
      int'(npix) * int'(c.cout_tiles) <= int'(FM_DEPTH) &&
      int'(c.h) * int'(c.w) * int'(c.cinw) <= int'(FM_DEPTH));
endmodule
