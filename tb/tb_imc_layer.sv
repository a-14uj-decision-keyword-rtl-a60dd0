// tb_imc_layer: layer 2 configuration (48 -> 48 channels, 2 groups, pool
// 4, one macro). Random weights, BN rows and flip bits are loaded into the
// macro through the configuration port in the row map of the layer; a
// random binary input stream is applied and every pooled output vector is
// compared with an independent model of the group convolution (24 channels
// x 8 taps, +-1 products, BN row sum, sign, flip, shuffle, OR-pool). Checks
// the 26-cycle position period (1 accept + 6 steps x 4 + 1) and one
// test-mode step on a random pattern.
module tb_imc_layer;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int CI = 48, CO = 48, P = 4, NPOS = 8 + 4 * 6 + 1;

  logic clear = 0, cfg_w_we = 0, cfg_w_macro = 0, cfg_f_we = 0;
  logic [2:0] cfg_w_bank = 0;
  logic [5:0] cfg_w_row = 0;
  logic [63:0] cfg_w_data = 0, cfg_f_data = 0;
  logic [1:0] cfg_f_chunk = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [CI-1:0] in_vec = 0;
  logic [CO-1:0] out_vec;
  logic test_start = 0, test_done;
  logic [2:0] test_step = 0;
  logic [191:0] test_pat = 0;
  logic [7:0] test_res;

  imc_layer #(.C_IN(CI), .C_OUT(CO), .POOL(P), .N_MACROS(1)) dut (.*);

  logic [191:0] W [CO];
  logic [63:0]  B [CO];
  logic [CO-1:0] flip;
  logic [CI-1:0] xin [NPOS];
  logic [CO-1:0] expv [8];
  int n_out = 0;
  logic bp_en = 1;
  always @(negedge clk) out_ready <= bp_en ? ($urandom % 3 != 0) : 1'b1;

  function automatic int dot(logic [191:0] x, logic [191:0] w, logic [63:0] b);
    int s = 0;
    for (int j = 0; j < 192; j++) s += (x[j] == w[j]) ? 1 : -1;
    for (int c = 0; c < 64; c++) s += b[c] ? 1 : -1;
    return s;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_vec !== expv[n_out]) begin
      failures++; $display("out %0d: got %h exp %h", n_out, out_vec, expv[n_out]);
    end
    n_out++;
  end

  initial begin
    int t_acc [NPOS];
    repeat (2) @(posedge clk);
    rst_n = 1;
    flip = {$urandom, $urandom};
    for (int o = 0; o < CO; o++) begin
      W[o] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      B[o] = {$urandom, $urandom};
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        cfg_w_we = 1; cfg_w_bank = 3'(o % 8); cfg_w_row = 6'((o / 8) * 4 + s);
        cfg_w_data = (s < 3) ? W[o][s * 64 +: 64] : B[o];
      end
    end
    @(negedge clk); cfg_w_we = 0; cfg_f_we = 1; cfg_f_data = {16'h0, flip};
    @(negedge clk); cfg_f_we = 0;
    for (int i = 0; i < NPOS; i++) xin[i] = {$urandom, $urandom};
    for (int p = 0; p + 8 <= NPOS; p++) begin
      if (p % P == 0) expv[p / P] = '0;
      for (int o = 0; o < CO; o++) begin
        logic [191:0] x;
        int g;
        g = o / 24;
        for (int t = 0; t < 8; t++)
          for (int c = 0; c < 24; c++) x[t * 24 + c] = xin[p + t][g * 24 + c];
        if ((dot(x, W[o], B[o]) >= 0) ^ flip[o])
          expv[p / P][shuffle_idx(o, CO, 2)] = 1'b1;
      end
    end
    for (int i = 0; i < NPOS; i++) begin
      @(negedge clk);
      in_valid = 1; in_vec = xin[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t_acc[i] = int'($time / 10);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (60) @(posedge clk);
    checks++;
    if (n_out != (NPOS - 7) / P) begin failures++; $display("got %0d outputs", n_out); end
    checks++;
    if (t_acc[10] - t_acc[9] != 26) begin
      failures++; $display("position period %0d, expected 26", t_acc[10] - t_acc[9]);
    end
    // test mode: step 4 (channels 32..39) on a random pattern
    test_pat = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    @(negedge clk); test_start = 1; test_step = 3'd4;
    @(negedge clk); test_start = 0;
    while (!test_done) @(negedge clk);
    for (int b = 0; b < 8; b++) begin
      checks++;
      if (test_res[b] !== (dot(test_pat, W[32 + b], B[32 + b]) >= 0)) begin
        failures++; $display("test-mode bank %0d wrong", b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
