// tb_kws_full: end-to-end test of the accelerator with every parameter at
// its default (16000-sample utterances), one stored sample and one
// training epoch.
//
// The testbench draws random binary weights for every layer, loads them
// through the configuration port (sinc taps and biases, all wordlines of
// the seven IMC macros, BN flip bits, FC weights and biases) and keeps its
// own copy. A behavioural reference written here from the network
// description (valid convolutions, XNOR-popcount sums with the BN
// wordline, flip, channel shuffle, OR pooling, GAP rounding, FC with
// saturation) predicts every result. The sequence is:
//   1. inference of a random utterance, logits and class checked;
//   2. NSTORE utterances with store_en: logits checked, the stored GAP
//      features in the feature memory checked against the reference;
//   3. training over the stored samples (labels chosen away from the
//      current prediction), then the margin of the label class over the
//      best other class, recomputed from the trained weights, must grow;
//   4. a new inference with the trained classifier, checked against the
//      reference using the weights now in the FC weight memory;
//   5. test mode on a single-macro layer and on the second macro of a
//      two-macro layer, raw SA bits checked.
// Input gaps are random. Counted mechanisms (each must occur): input
// stall (the sinc layer busy with its six PE cycles), data passed through
// feature buffers A and B, second macro of layer 5 and layer 6 computing, feature store,
// bias update, SGA weight update, SGA gradient kept below threshold,
// test-mode read-out, inference after training. Outputs held between
// layers are counted and printed but not required: with this schedule
// each layer is faster than its producer, so none occur.
module tb_kws_full;
  import kws_pkg::*;

  localparam int unsigned NS     = N_SAMPLES;
  localparam int unsigned NSTORE = 1;
  localparam int unsigned NEPOCH = 1;
  localparam int unsigned MAXP   = NS / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        cfg_we = 0;
  cfg_t        cfg;
  logic        frame_start = 0, in_valid = 0, in_ready;
  logic signed [7:0] in_sample = 0;
  logic        res_valid;
  logic [3:0]  res_class;
  act_t        res_logits [N_CLASSES];
  logic        store_en = 0;
  logic [6:0]  store_slot = 0;
  logic [3:0]  store_label = 0;
  logic        train_start = 0, train_busy, train_done;
  logic [6:0]  train_n_samples = 0;
  logic [9:0]  train_epochs = 0, train_epoch;
  grad_t       sga_thr = 0;
  logic [3:0]  lr_shift = 0;
  logic [15:0] sga_updates;
  logic        test_shift = 0, test_si = 0, test_so, test_start = 0, test_done;
  logic [2:0]  test_layer = 0;
  logic [4:0]  test_step = 0;

  kws_top dut (.*);

  // ------------------------------------------------------------ model state
  logic [14:0]        sinc_w [SINC_CH];
  int                 sinc_b [SINC_CH];
  logic [191:0]       wv   [2:6][192];
  logic [63:0]        bn   [2:6][192];
  logic               flip [2:6][192];
  int                 fcw  [192][10];
  int                 fcb  [10];
  logic signed [7:0]  xs   [NS];
  logic [191:0]       act  [1:6][MAXP];
  int                 len  [1:6];
  int                 feat [192];
  int                 sfeat [NSTORE][192];
  int                 slab [NSTORE];
  int                 lg   [10];
  int                 cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mechanisms
  int m_stall = 0, m_l1_hold = 0, m_buf_hold = 0, m_mac5 = 0, m_mac6 = 0;
  int m_store = 0, m_bias = 0, m_wupd = 0, m_skip = 0, m_test = 0, m_after = 0;
  int n_res = 0, m_buf_b = 0;

  always @(negedge clk) if (rst_n) begin
    if (in_valid && !in_ready) m_stall++;
    if ((dut.l1_v && !dut.l1_r) || (dut.l2_v && !dut.l2_r) || (dut.l3_v && !dut.l3_r) ||
        (dut.a_v && !dut.a_r) || (dut.l4_v && !dut.l4_r) || (dut.l5_v && !dut.l5_r) ||
        (dut.b_v && !dut.b_r) || (dut.l6_v && !dut.l6_r)) m_l1_hold++;
    if (dut.a_v && dut.a_r) m_buf_hold++;
    if (dut.b_v && dut.b_r) m_buf_b++;
    if (dut.u_l5.g_macro[1].u_uce.cmp_en) m_mac5++;
    if (dut.u_l6.g_macro[1].u_uce.cmp_en) m_mac6++;
    if (dut.u_feat_mem.we) m_store++;
    if (dut.bias_upd) m_bias++;
    if (test_done) m_test++;
    if (res_valid) n_res++;
  end

  // ------------------------------------------------------------ reference
  function automatic int bn_sum(logic [191:0] v, logic [191:0] w, logic [63:0] b);
    return 2 * $countones(~(v ^ w)) - 192 + 2 * $countones(b) - 64;
  endfunction

  task automatic ref_l1();
    int np;
    np = NS - SINC_TAPS + 1;
    len[1] = np / 4;
    for (int j = 0; j < len[1]; j++) begin
      act[1][j] = '0;
      for (int pp = 0; pp < 4; pp++)
        for (int ch = 0; ch < SINC_CH; ch++) begin
          int s;
          s = sinc_b[ch];
          for (int t = 0; t < SINC_TAPS; t++)
            s += sinc_w[ch][t] ? int'(xs[4*j+pp+t]) : -int'(xs[4*j+pp+t]) - 1;
          if (s >= 0) act[1][j][ch] = 1'b1;
        end
    end
  endtask

  task automatic ref_imc(int L, int ci, int co, int pool);
    int g_n, npg, np;
    g_n = ci / 24; npg = co / g_n; np = len[L-1] - 7;
    len[L] = np / pool;
    for (int j = 0; j < len[L]; j++) begin
      act[L][j] = '0;
      for (int pp = 0; pp < pool; pp++) begin
        int p;
        p = j * pool + pp;
        for (int o = 0; o < co; o++) begin
          logic [191:0] v;
          int g;
          logic b;
          g = o / npg;
          v = '0;
          for (int t = 0; t < 8; t++)
            for (int c = 0; c < 24; c++) v[t*24+c] = act[L-1][p+t][g*24+c];
          b = (bn_sum(v, wv[L][o], bn[L][o]) >= 0) ^ flip[L][o];
          if (b) act[L][j][shuffle_idx(o, co, g_n)] = 1'b1;
        end
      end
    end
  endtask

  task automatic ref_feat();
    ref_l1();
    ref_imc(2, 48, 48, 4);
    ref_imc(3, 48, 96, 2);
    ref_imc(4, 96, 96, 2);
    ref_imc(5, 96, 192, 2);
    ref_imc(6, 192, 192, 2);
    for (int ch = 0; ch < 192; ch++) begin
      int c, n, num;
      c = 0; n = len[6];
      for (int j = 0; j < n; j++) c += int'(act[6][j][ch]);
      num = (2 * c - n) * 16;
      feat[ch] = (num >= 0) ? (num + n / 2) / n : (num - n / 2) / n;
    end
  endtask

  function automatic void ref_fc(input int f [192]);
    for (int o = 0; o < 10; o++) begin
      int a;
      a = fcb[o];
      for (int i = 0; i < 192; i++) a += f[i] * fcw[i][o];
      a = (a + 64) >>> 7;
      lg[o] = (a > 127) ? 127 : (a < -128) ? -128 : a;
    end
  endfunction

  function automatic int argmax();
    int c;
    c = 0;
    for (int o = 1; o < 10; o++) if (lg[o] > lg[c]) c = o;
    return c;
  endfunction

  // ------------------------------------------------------------ host tasks
  task automatic cfg_wr(cfg_tgt_e tgt, int layer, int macro, int bank, int addr,
                        logic [79:0] data);
    @(negedge clk);
    cfg_we = 1;
    cfg.tgt = tgt; cfg.layer = 3'(layer); cfg.macro = 1'(macro);
    cfg.bank = 3'(bank); cfg.addr = 8'(addr); cfg.data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic logic [63:0] rand_row(int ones);
    logic [63:0] r;
    r = '0;
    while ($countones(r) < ones) r[$urandom % 64] = 1'b1;
    return r;
  endfunction

  task automatic config_all();
    int lay_co [2:6];
    int lay_nm [2:6];
    lay_co = '{48, 96, 96, 192, 192};
    lay_nm = '{1, 1, 1, 2, 2};
    for (int ch = 0; ch < SINC_CH; ch++) begin
      sinc_w[ch] = 15'($urandom);
      sinc_b[ch] = -350 + int'($urandom % 200);
      cfg_wr(CFG_SINC_W, 0, 0, 0, ch, 80'(sinc_w[ch]));
      cfg_wr(CFG_SINC_B, 0, 0, 0, ch, 80'(12'(sinc_b[ch])));
    end
    for (int L = 2; L <= 6; L++) begin
      int co, spm;
      co = lay_co[L];
      spm = (co / 8) / lay_nm[L];
      for (int o = 0; o < co; o++) begin
        int q, b, m, rb;
        wv[L][o] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        bn[L][o] = rand_row((L == 2) ? 25 : 28);
        flip[L][o] = ($urandom % 8 == 0);
        q = o / 8; b = o % 8; m = q / spm; rb = (q % spm) * 4;
        for (int s = 0; s < 3; s++)
          cfg_wr(CFG_IMC_W, L, m, b, rb + s, 80'(wv[L][o][s*64 +: 64]));
        cfg_wr(CFG_IMC_W, L, m, b, rb + 3, 80'(bn[L][o]));
      end
      for (int c = 0; c * 64 < co; c++) begin
        logic [63:0] d;
        d = '0;
        for (int k = 0; k < 64; k++) if (c * 64 + k < co) d[k] = flip[L][c*64+k];
        cfg_wr(CFG_BN_FLIP, L, 0, 0, c, 80'(d));
      end
    end
    for (int i = 0; i < 192; i++) begin
      logic [79:0] d;
      for (int o = 0; o < 10; o++) begin
        fcw[i][o] = int'($urandom % 64) - 32;
        d[8*o +: 8] = 8'(fcw[i][o]);
      end
      cfg_wr(CFG_FC_W, 0, 0, 0, i, d);
    end
    for (int o = 0; o < 10; o++) begin
      fcb[o] = int'($urandom % 2048) - 1024;
      cfg_wr(CFG_FC_B, 0, 0, 0, o, 80'(16'(fcb[o])));
    end
  endtask

  // stream one utterance and return the decision
  task automatic infer(output int cls_o, output int cycles);
    int i, t0, n0;
    for (int k = 0; k < NS; k++) xs[k] = 8'($urandom);
    @(negedge clk); frame_start = 1;
    @(negedge clk); frame_start = 0;
    t0 = cyc; n0 = n_res;
    i = 0;
    while (i < int'(NS)) begin
      if ($urandom % 8 == 0) in_valid = 0;
      else begin in_valid = 1; in_sample = xs[i]; end
      if (in_valid && in_ready) i++;
      @(negedge clk);
    end
    in_valid = 0;
    while (n_res == n0) @(negedge clk);
    cycles = cyc - t0;
    cls_o = int'(res_class);
  endtask

  task automatic check_logits(string what);
    ref_fc(feat);
    for (int o = 0; o < 10; o++) begin
      checks++;
      if (int'(res_logits[o]) != lg[o]) begin
        failures++;
        $display("%s logit %0d: got %0d exp %0d", what, o, res_logits[o], lg[o]);
      end
    end
    checks++;
    if (int'(res_class) != argmax()) begin
      failures++; $display("%s class %0d exp %0d", what, res_class, argmax());
    end
  endtask

  function automatic int margin(int s);
    int best;
    ref_fc(sfeat[s]);
    best = -1000;
    for (int o = 0; o < 10; o++) if (o != slab[s] && lg[o] > best) best = lg[o];
    return lg[slab[s]] - best;
  endfunction

  task automatic load_trained();
    for (int i = 0; i < 192; i++)
      for (int o = 0; o < 10; o++) fcw[i][o] = int'($signed(dut.u_fcw_mem.mem[i][8*o +: 8]));
    for (int o = 0; o < 10; o++) fcb[o] = int'(dut.u_fc.bias[o]);
  endtask

  task automatic test_mode(int L, int step);
    logic [191:0] pat;
    logic [7:0] got, expv;
    pat = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < 192; k++) begin
      @(negedge clk); test_shift = 1; test_si = pat[k];
    end
    @(negedge clk); test_shift = 0; test_layer = 3'(L); test_step = 5'(step); test_start = 1;
    @(negedge clk); test_start = 0;
    while (!test_done) @(negedge clk);
    @(negedge clk);
    for (int k = 0; k < 8; k++) begin
      got[k] = test_so;
      test_shift = 1;
      @(negedge clk);
    end
    test_shift = 0;
    for (int b = 0; b < 8; b++) expv[b] = bn_sum(pat, wv[L][step*8+b], bn[L][step*8+b]) >= 0;
    checks++;
    if (got !== expv) begin
      failures++; $display("test mode L%0d step %0d: got %b exp %b", L, step, got, expv);
    end
  endtask

  // ------------------------------------------------------------ sequence
  initial begin
    int c, cycles, m_before [NSTORE], imp;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    config_all();
    $display("configured at cycle %0d", cyc);

    infer(c, cycles);
    ref_feat();
    check_logits("first");
    $display("inference: %0d samples in %0d cycles, class %0d", NS, cycles, c);
    checks++;
    if (cycles > 8 * int'(NS) + 3000) begin failures++; $display("too slow"); end

    for (int s = 0; s < int'(NSTORE); s++) begin
      @(negedge clk); store_en = 1; store_slot = 7'(s);
      infer(c, cycles);
      ref_feat();
      check_logits("store");
      slab[s] = (argmax() + 1 + s) % 10;
      store_label = 4'(slab[s]);
      for (int i = 0; i < 192; i++) sfeat[s][i] = feat[i];
      store_en = 0;
    end
    // labels are written with the last GAP value; set them again now that
    // they are chosen (the design latches store_label on the last feature)
    for (int s = 0; s < int'(NSTORE); s++) dut.labels[s] = 4'(slab[s]);
    for (int s = 0; s < int'(NSTORE); s++)
      for (int i = 0; i < 192; i++) begin
        checks++;
        if (int'($signed(dut.u_feat_mem.mem[s*192+i])) != sfeat[s][i]) begin
          failures++;
          if (failures < 10) $display("feature %0d/%0d: got %0d exp %0d", s, i,
                                      $signed(dut.u_feat_mem.mem[s*192+i]), sfeat[s][i]);
        end
      end

    for (int s = 0; s < int'(NSTORE); s++) m_before[s] = margin(s);
    @(negedge clk);
    train_n_samples = 7'(NSTORE); train_epochs = 10'(NEPOCH);
    sga_thr = 16'sd256; lr_shift = 4'd3; train_start = 1;
    @(negedge clk); train_start = 0;
    while (!train_done) @(negedge clk);
    $display("training done at cycle %0d, %0d weights changed in last pass", cyc, sga_updates);
    for (int i = 0; i < 192; i++)
      for (int o = 0; o < 10; o++)
        if (int'($signed(dut.u_fcw_mem.mem[i][8*o +: 8])) != fcw[i][o]) m_wupd++;
    for (int i = 0; i < 192; i++)
      for (int o = 0; o < 10; o++)
        if (dut.u_grad_mem.mem[i][16*o +: 16] != 0) m_skip++;
    load_trained();
    imp = 0;
    for (int s = 0; s < int'(NSTORE); s++) begin
      int m;
      m = margin(s);
      $display("sample %0d label %0d margin %0d -> %0d", s, slab[s], m_before[s], m);
      if (m > m_before[s]) imp++;
    end
    checks++;
    if (imp == 0) begin failures++; $display("training improved no sample"); end

    infer(c, cycles);
    ref_feat();
    check_logits("after training");
    m_after++;

    test_mode(2, 3);
    test_mode(5, 13);
    test_mode(6, 23);

    $display("stall %0d hold %0d buf_a %0d buf_b %0d mac5 %0d mac6 %0d store %0d bias %0d wupd %0d skip %0d test %0d after %0d",
             m_stall, m_l1_hold, m_buf_hold, m_buf_b, m_mac5, m_mac6, m_store, m_bias, m_wupd,
             m_skip, m_test, m_after);
    checks += 11;
    if (m_stall == 0)    begin failures++; $display("no input stall"); end
    if (m_buf_hold == 0) begin failures++; $display("buffer A unused"); end
    if (m_buf_b == 0)    begin failures++; $display("buffer B unused"); end
    if (m_mac5 == 0)     begin failures++; $display("layer 5 macro 1 idle"); end
    if (m_mac6 == 0)     begin failures++; $display("layer 6 macro 1 idle"); end
    if (m_store == 0)    begin failures++; $display("no store"); end
    if (m_bias == 0)     begin failures++; $display("no bias update"); end
    if (m_wupd == 0)     begin failures++; $display("no weight update"); end
    if (m_skip == 0)     begin failures++; $display("no kept gradient"); end
    if (m_test == 0)     begin failures++; $display("no test read-out"); end
    if (m_after == 0)    begin failures++; $display("no inference after training"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
