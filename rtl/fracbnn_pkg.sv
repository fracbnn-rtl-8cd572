// fracbnn_pkg - types and constants shared by the FracBNN accelerator.
//
// The accelerator computes binary convolutions with XNOR and popcount on
// B-bit words that pack B channels of one pixel. Activations are 2 bits wide
// and stored as two bit planes (MSB and LSB); weights are 1 bit. The ImageNet
// configuration packs B = 32 channels per word and computes P = 32 output
// channels in parallel, both as in the paper. Popcounts are kept in CNTW-bit
// unsigned counters; everything after the convolution (BatchNorm, biased
// PReLU, shortcut, pooling) is signed Q7.8 fixed point, which is this
// design's own choice: the paper does not give the number format.
package fracbnn_pkg;

  localparam int unsigned B    = 32;  // bits packed per word (ImageNet design)
  localparam int unsigned P    = 32;  // output channels computed in parallel
  localparam int unsigned KK   = 9;   // taps of the fully unrolled 3x3 window
  localparam int unsigned CNTW = 16;  // popcount accumulator width
  localparam int unsigned FXW  = 16;  // fixed-point activation width
  localparam int unsigned FRAC = 8;   // fractional bits of the fixed-point format

  typedef logic signed [FXW-1:0] fx_t;
  typedef logic [CNTW-1:0]       cnt_t;

  // Per-output-channel auxiliary parameters, fetched from DDR with the layer.
  // thresh is the learnable gate threshold Delta of the fractional convolution.
  typedef struct packed {
    cnt_t thresh;     // update when O_MSB > thresh
    fx_t  bn1_scale;  // BatchNorm after the convolution: y = scale*x + bias
    fx_t  bn1_bias;
    fx_t  alpha;      // BPReLU: d = y - alpha
    fx_t  beta;       //         z = d >= 0 ? d : beta*d
    fx_t  gamma;      //         out = z + gamma
    fx_t  bn2_scale;  // BatchNorm after the shortcut addition
    fx_t  bn2_bias;
  } chan_param_t;

  typedef enum logic [1:0] {
    OP_CONV = 2'd0,   // binary or fractional convolution layer
    OP_POOL = 2'd1,   // average pooling of a streamed feature map
    OP_FC   = 2'd2    // linear classifier over the pooled features
  } op_e;

  // Layer descriptor written by the host before start.
  typedef struct packed {
    op_e        op;
    logic       binary;      // 1: input layer, base phase only
    logic       k3;          // 1: 3x3 window, 0: 1x1
    logic       stride2;     // stride 2 (downsample)
    logic       sc_en;       // add a shortcut streamed from memory
    logic       rd_bank;     // ping-pong bank read by this layer
    logic [7:0] h;           // input height
    logic [7:0] w;           // input width
    logic [5:0] cinw;        // input words per pixel (Cin / B), 1..32
    logic [5:0] cout_tiles;  // output tiles (Cout / P), 1..32
    logic [3:0] pool_k;      // pooling window k x k, 1..8
    logic [10:0] pool_n;     // number of pooled output vectors
    logic [10:0] fc_nfeat;   // classifier input features
  } layer_cfg_t;

  typedef enum logic [2:0] {
    LD_WGT  = 3'd0,   // weight word: addr = word*KK + tap, all P lanes
    LD_PRM  = 3'd1,   // chan_param_t of output channel addr
    LD_PIX  = 3'd2,   // 8-bit pixel, thermometer encoded into the MSB plane
    LD_MSB  = 3'd3,   // raw MSB word
    LD_LSB  = 3'd4    // raw LSB word
  } ld_sel_e;

  // Saturate a wide signed value to the fixed-point range.
  function automatic fx_t sat_fx(input logic signed [47:0] v);
    if (v > 48'sd32767)       return fx_t'(16'sh7fff);
    else if (v < -48'sd32768) return fx_t'(16'sh8000);
    else                      return fx_t'(v[FXW-1:0]);
  endfunction

endpackage
