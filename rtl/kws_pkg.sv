// kws_pkg: constants, number formats and helper functions shared by the
// keyword-spotting accelerator.
//
// Network (taken from the model description): 8-bit raw audio of 16000
// samples -> binarized sinc convolution (48 channels, 15 taps, pool 4) ->
// five binarized group convolutions with 24 channels per group and 8 taps
// (48/pool 4, 96/pool 2, 96/pool 2, 192/pool 2, 192/pool 2) -> global
// average pooling -> fully connected 192 x 10.
//
// Own choices: convolutions are "valid" (no padding, stride 1), pooling is
// non-overlapping and drops an incomplete last window, and the fixed point
// formats of the classifier use the bit splits listed below.
package kws_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_SAMPLES  = 16000;
  localparam int unsigned GROUP_SIZE = 24;      // input channels per group
  localparam int unsigned N_CLASSES  = 10;
  localparam int unsigned FEAT_CH    = 192;     // channels into GAP / FC
  localparam int unsigned SINC_TAPS  = 15;
  localparam int unsigned SINC_CH    = 48;
  localparam int unsigned CONV_K     = 8;
  localparam int unsigned IMC_COLS   = 64;      // bitlines per bank
  localparam int unsigned IMC_ROWS   = 64;      // wordlines per bank
  localparam int unsigned IMC_BANKS  = 8;       // banks (outputs) per macro
  localparam int unsigned WIN_BITS   = GROUP_SIZE * CONV_K;     // 192
  localparam int unsigned N_SEG      = WIN_BITS / IMC_COLS;     // 3

  // Positions after a "valid" convolution of kernel k and pooling p.
  function automatic int unsigned layer_len(int unsigned n_in, int unsigned k,
                                            int unsigned p);
    return (n_in - k + 1) / p;
  endfunction

  // ---------------------------------------------------------------- formats
  // activation: 1 sign, 3 integer, 4 fraction bits (Q3.4)
  // weight, error: 1 sign, 7 fraction bits (Q0.7)
  // gradient, gradient accumulator, FC bias: 16 bits in units of 2^-11
  typedef logic signed [7:0]  act_t;
  typedef logic signed [7:0]  fcw_t;
  typedef logic signed [7:0]  err_t;
  typedef logic signed [15:0] grad_t;

  localparam int unsigned EXP_W = 24;   // exp LUT entry, unsigned Q12.12
  typedef logic [EXP_W-1:0] exp_t;

  // ---------------------------------------------------------------- config
  typedef enum logic [2:0] {
    CFG_SINC_W  = 3'd0,   // addr = channel, data[14:0] = tap weights
    CFG_SINC_B  = 3'd1,   // addr = channel, data[11:0] = signed bias
    CFG_IMC_W   = 3'd2,   // layer/macro/bank, addr = row, data[63:0]
    CFG_BN_FLIP = 3'd3,   // layer, addr = 64-channel chunk, data[63:0]
    CFG_FC_W    = 3'd4,   // addr = input index, data[8*o +: 8] = w[o]
    CFG_FC_B    = 3'd5    // addr = class, data[15:0]
  } cfg_tgt_e;

  typedef struct packed {
    cfg_tgt_e    tgt;
    logic [2:0]  layer;   // 2..6 for IMC layers
    logic        macro;   // 0/1 inside a two-macro layer
    logic [2:0]  bank;
    logic [7:0]  addr;
    logic [79:0] data;
  } cfg_t;

  // ---------------------------------------------------------------- helpers
  // ShuffleNet channel shuffle: channel g*n+i (group g of G, n per group)
  // is moved to position i*G+g.
  function automatic int unsigned shuffle_idx(int unsigned o, int unsigned c,
                                              int unsigned g);
    int unsigned n;
    n = c / g;
    return (o % n) * g + (o / n);
  endfunction

  // exp(n/16) as unsigned Q12.12, for n the raw value of a Q3.4 logit.
  // Computed by repeated multiplication with exp(+-1/16) in Q32.
  function automatic exp_t exp_q12(int n);
    logic [127:0] v;
    logic [127:0] f;
    int unsigned  m;
    v = 128'd1 << 32;
    f = (n >= 0) ? 128'd4571968888 : 128'd4034748382;  // exp(+-1/16) * 2^32
    m = (n >= 0) ? n : -n;
    for (int unsigned i = 0; i < m; i++) v = (v * f) >> 32;
    v = (v + (128'd1 << 19)) >> 20;
    if (v > 128'((1 << EXP_W) - 1)) v = 128'((1 << EXP_W) - 1);
    return v[EXP_W-1:0];
  endfunction

endpackage
