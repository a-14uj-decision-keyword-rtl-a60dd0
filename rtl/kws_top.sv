// kws_top: keyword-spotting accelerator with in-SRAM computing and on-chip
// fine-tuning of the classifier.
//
// Inference datapath (one utterance = N_SAMPLES 8-bit audio samples):
//   sinc_conv (layer 1, digital, 8 PEs)
//   -> imc_layer L2 (48->48, pool 4, 1 macro) -> L3 (48->96, pool 2, 1 macro)
//   -> fm_buffer A -> L4 (96->96, pool 2, 1 macro)
//   -> L5 (96->192, pool 2, 2 macros) -> fm_buffer B
//   -> L6 (192->192, pool 2, 2 macros) -> gap -> fc_layer -> class.
// All binary weights stay in the seven IMC macros; the layers run as a
// stream with valid/ready between them.
//
// Customisation (training): with store_en high during an utterance, the
// GAP output (192 x Q3.4) and store_label are written to slot store_slot
// of the feature memory. train_start then runs train_ctrl over
// train_n_samples stored slots for train_epochs epochs: FC forward from
// the feature memory, ce_module error with x1.375 scaling, bias update,
// gradient accumulation in the gradient memory, and per epoch an SGA
// weight-update pass with threshold sga_thr and learning rate
// 2^-lr_shift, writing the FC weight memory.
//
// Test mode: a 192-bit pattern is shifted into test_reg (test_shift,
// test_si); test_start runs one step of layer test_layer (2..6), index
// test_step, on that pattern; the raw SA bits are captured and shifted out
// on test_so, LSB first.
//
// Configuration: cfg_we with a cfg_t word (see kws_pkg) writes sinc
// weights and biases, IMC wordlines, BN flip bits, FC weights and biases.
// frame_start clears the layer state before each utterance. res_valid
// pulses with res_class and res_logits at the end of each inference.
// Structure and sizes follow the paper; the host-side ports are this
// design's.
module kws_top
  import kws_pkg::*;
#(
  parameter int unsigned N_SAMP    = N_SAMPLES,
  parameter int unsigned MAX_BATCH = 90,
  localparam int unsigned L1_N = layer_len(N_SAMP, SINC_TAPS, 4),
  localparam int unsigned L2_N = layer_len(L1_N, CONV_K, 4),
  localparam int unsigned L3_N = layer_len(L2_N, CONV_K, 2),
  localparam int unsigned L4_N = layer_len(L3_N, CONV_K, 2),
  localparam int unsigned L5_N = layer_len(L4_N, CONV_K, 2),
  localparam int unsigned L6_N = layer_len(L5_N, CONV_K, 2),
  localparam int unsigned SLW  = $clog2(MAX_BATCH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            cfg_we,
  input  cfg_t            cfg,
  // audio in
  input  logic            frame_start,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic signed [7:0] in_sample,
  // decision
  output logic            res_valid,
  output logic [3:0]      res_class,
  output act_t            res_logits [N_CLASSES],
  // feature storage for customisation
  input  logic            store_en,
  input  logic [SLW-1:0]  store_slot,
  input  logic [3:0]      store_label,
  // training
  input  logic            train_start,
  input  logic [SLW-1:0]  train_n_samples,
  input  logic [9:0]      train_epochs,
  input  grad_t           sga_thr,
  input  logic [3:0]      lr_shift,
  output logic            train_busy,
  output logic            train_done,
  output logic [9:0]      train_epoch,
  output logic [15:0]     sga_updates,
  // test mode
  input  logic            test_shift,
  input  logic            test_si,
  output logic            test_so,
  input  logic            test_start,
  input  logic [2:0]      test_layer,
  input  logic [4:0]      test_step,
  output logic            test_done
);

  // ------------------------------------------------------------ config decode
  logic cfg_imc, cfg_flip;
  assign cfg_imc  = cfg_we && (cfg.tgt == CFG_IMC_W);
  assign cfg_flip = cfg_we && (cfg.tgt == CFG_BN_FLIP);

  // ------------------------------------------------------------ test register
  logic [WIN_BITS-1:0] test_pat;
  logic [4:0]          t_done;
  logic [7:0]          t_res [5];
  logic                t_any;
  logic [7:0]          t_sel;

  always_comb begin
    t_sel = '0;
    for (int l = 0; l < 5; l++) if (t_done[l]) t_sel = t_res[l];
  end
  assign t_any     = |t_done;
  assign test_done = t_any;

  test_reg #(.PAT_W(WIN_BITS), .RES_W(8)) u_test (
    .clk, .rst_n, .shift(test_shift), .si(test_si), .so(test_so),
    .pattern(test_pat), .res_load(t_any), .res_in(t_sel)
  );

  // ------------------------------------------------------------ layer 1
  logic        l1_v, l1_r;
  logic [47:0] l1_d;

  sinc_conv u_l1 (
    .clk, .rst_n, .clear(frame_start),
    .cfg_w_we  (cfg_we && cfg.tgt == CFG_SINC_W),
    .cfg_b_we  (cfg_we && cfg.tgt == CFG_SINC_B),
    .cfg_ch    (cfg.addr[5:0]),
    .cfg_w_data(cfg.data[14:0]),
    .cfg_b_data(cfg.data[11:0]),
    .in_valid, .in_ready, .in_sample,
    .out_valid(l1_v), .out_ready(l1_r), .out_vec(l1_d)
  );

  // ------------------------------------------------------------ layers 2..6
  logic         l2_v, l2_r, l3_v, l3_r, a_v, a_r, l4_v, l4_r;
  logic         l5_v, l5_r, b_v, b_r, l6_v, l6_r;
  logic [47:0]  l2_d;
  logic [95:0]  l3_d, a_d, l4_d;
  logic [191:0] l5_d, b_d, l6_d;

`define KWS_IMC_LAYER(NAME, L, CI, CO, P, NM, SW, IV, IR, ID, OV, OR, OD) \
  imc_layer #(.C_IN(CI), .C_OUT(CO), .POOL(P), .N_MACROS(NM)) NAME ( \
    .clk, .rst_n, .clear(frame_start), \
    .cfg_w_we(cfg_imc && cfg.layer == 3'd``L), .cfg_w_macro(cfg.macro), \
    .cfg_w_bank(cfg.bank), .cfg_w_row(cfg.addr[5:0]), .cfg_w_data(cfg.data[63:0]), \
    .cfg_f_we(cfg_flip && cfg.layer == 3'd``L), .cfg_f_chunk(cfg.addr[1:0]), \
    .cfg_f_data(cfg.data[63:0]), \
    .in_valid(IV), .in_ready(IR), .in_vec(ID), \
    .out_valid(OV), .out_ready(OR), .out_vec(OD), \
    .test_start(test_start && test_layer == 3'd``L), .test_step(test_step[SW-1:0]), \
    .test_pat(test_pat), .test_done(t_done[L-2]), .test_res(t_res[L-2]) \
  );

  `KWS_IMC_LAYER(u_l2, 2,  48,  48, 4, 1, 3, l1_v, l1_r, l1_d, l2_v, l2_r, l2_d)
  `KWS_IMC_LAYER(u_l3, 3,  48,  96, 2, 1, 4, l2_v, l2_r, l2_d, l3_v, l3_r, l3_d)
  `KWS_IMC_LAYER(u_l4, 4,  96,  96, 2, 1, 4, a_v,  a_r,  a_d,  l4_v, l4_r, l4_d)
  `KWS_IMC_LAYER(u_l5, 5,  96, 192, 2, 2, 5, l4_v, l4_r, l4_d, l5_v, l5_r, l5_d)
  `KWS_IMC_LAYER(u_l6, 6, 192, 192, 2, 2, 5, b_v,  b_r,  b_d,  l6_v, l6_r, l6_d)
`undef KWS_IMC_LAYER

  fm_buffer #(.WIDTH(96), .DEPTH(L3_N)) u_buf_a (
    .clk, .rst_n, .clear(frame_start),
    .in_valid(l3_v), .in_ready(l3_r), .in_data(l3_d),
    .out_valid(a_v), .out_ready(a_r), .out_data(a_d)
  );

  fm_buffer #(.WIDTH(192), .DEPTH(L5_N)) u_buf_b (
    .clk, .rst_n, .clear(frame_start),
    .in_valid(l5_v), .in_ready(l5_r), .in_data(l5_d),
    .out_valid(b_v), .out_ready(b_r), .out_data(b_d)
  );

  // ------------------------------------------------------------ GAP
  logic       g_v, g_last;
  logic [7:0] g_idx;
  act_t       g_d;

  gap #(.C(FEAT_CH), .N_POS(L6_N)) u_gap (
    .clk, .rst_n, .clear(frame_start),
    .in_valid(l6_v), .in_ready(l6_r), .in_vec(l6_d),
    .out_valid(g_v), .out_idx(g_idx), .out_data(g_d), .out_last(g_last)
  );

  // ------------------------------------------------------------ training units
  localparam int unsigned FAW = $clog2(MAX_BATCH * FEAT_CH);

  logic           fm_re, st_v, st_last, st_fc, fc_done, ce_start, ce_done;
  logic           bias_upd, sga_clr, sga_upd, sga_done, sga_busy, ce_busy;
  logic [FAW-1:0] fm_raddr;
  act_t           fm_rdata, st_d;
  logic [7:0]     st_idx;
  logic [SLW-1:0] t_sample;
  err_t           err [N_CLASSES];
  logic [3:0]     labels [MAX_BATCH];

  sram_1r1w #(.WIDTH(8), .DEPTH(MAX_BATCH * FEAT_CH)) u_feat_mem (
    .clk,
    .we(g_v && store_en), .waddr(FAW'(int'(store_slot) * FEAT_CH + int'(g_idx))),
    .wdata(g_d),
    .re(fm_re), .raddr(fm_raddr), .rdata(fm_rdata)
  );

  always_ff @(posedge clk)
    if (g_v && store_en && g_last) labels[store_slot] <= store_label;

  train_ctrl #(.MAX_BATCH(MAX_BATCH), .N_IN(FEAT_CH)) u_tctl (
    .clk, .rst_n,
    .start(train_start), .n_samples(train_n_samples), .n_epochs(train_epochs),
    .busy(train_busy), .done(train_done), .epoch(train_epoch), .sample(t_sample),
    .fm_re, .fm_raddr, .fm_rdata,
    .st_valid(st_v), .st_idx, .st_data(st_d), .st_last, .st_to_fc(st_fc),
    .fc_done, .ce_start, .ce_done, .bias_upd,
    .sga_clr_start(sga_clr), .sga_upd_start(sga_upd),
    .sga_done, .sga_busy
  );

  // ------------------------------------------------------------ FC layer
  logic        fc_in_v, fc_in_last, fc_w_re;
  logic [7:0]  fc_in_idx, fc_w_raddr;
  act_t        fc_in_d;
  logic [79:0] w_rdata;
  act_t        logits [N_CLASSES];
  logic [3:0]  cls;

  always_comb begin
    if (train_busy) begin
      fc_in_v = st_v && st_fc; fc_in_idx = st_idx; fc_in_d = st_d; fc_in_last = st_last;
    end else begin
      fc_in_v = g_v; fc_in_idx = g_idx; fc_in_d = g_d; fc_in_last = g_last;
    end
  end

  fc_layer #(.N_IN(FEAT_CH), .N_OUT(N_CLASSES)) u_fc (
    .clk, .rst_n,
    .cfg_b_we(cfg_we && cfg.tgt == CFG_FC_B), .cfg_b_idx(cfg.addr[3:0]),
    .cfg_b_data(grad_t'(cfg.data[15:0])),
    .bias_upd, .bias_err(err), .lr_shift,
    .f_valid(fc_in_v), .f_idx(fc_in_idx), .f_data(fc_in_d), .f_last(fc_in_last),
    .w_re(fc_w_re), .w_raddr(fc_w_raddr), .w_rdata,
    .done(fc_done), .logits, .cls
  );

  assign res_valid  = fc_done && !train_busy;
  assign res_class  = cls;
  assign res_logits = logits;

  ce_module #(.N_OUT(N_CLASSES)) u_ce (
    .clk, .rst_n, .start(ce_start), .logits, .label(labels[t_sample]),
    .busy(ce_busy), .done(ce_done), .err
  );

  // ------------------------------------------------------------ SGA + memories
  logic         g_re, g_we, s_w_re, s_w_we;
  logic [7:0]   g_raddr, g_waddr, s_w_raddr, s_w_waddr;
  logic [159:0] g_rdata, g_wdata;
  logic [79:0]  s_w_wdata;

  sga_module #(.N_IN(FEAT_CH), .N_OUT(N_CLASSES)) u_sga (
    .clk, .rst_n, .thr(sga_thr), .lr_shift,
    .acc_valid(st_v && !st_fc), .acc_idx(st_idx), .acc_data(st_d), .err,
    .upd_start(sga_upd), .clr_start(sga_clr),
    .busy(sga_busy), .done(sga_done), .n_updates(sga_updates),
    .g_re, .g_raddr, .g_rdata, .g_we, .g_waddr, .g_wdata,
    .w_re(s_w_re), .w_raddr(s_w_raddr), .w_rdata,
    .w_we(s_w_we), .w_waddr(s_w_waddr), .w_wdata(s_w_wdata)
  );

  sram_1r1w #(.WIDTH(160), .DEPTH(FEAT_CH)) u_grad_mem (
    .clk, .we(g_we), .waddr(g_waddr), .wdata(g_wdata),
    .re(g_re), .raddr(g_raddr), .rdata(g_rdata)
  );

  logic       cfg_fcw;
  assign cfg_fcw = cfg_we && cfg.tgt == CFG_FC_W;

  sram_1r1w #(.WIDTH(80), .DEPTH(FEAT_CH)) u_fcw_mem (
    .clk,
    .we   (cfg_fcw || s_w_we),
    .waddr(cfg_fcw ? cfg.addr : s_w_waddr),
    .wdata(cfg_fcw ? cfg.data : s_w_wdata),
    .re   (s_w_re || fc_w_re),
    .raddr(s_w_re ? s_w_raddr : fc_w_raddr),
    .rdata(w_rdata)
  );

  a_w_port: assert property (@(posedge clk) disable iff (!rst_n) !(s_w_re && fc_w_re));

endmodule
