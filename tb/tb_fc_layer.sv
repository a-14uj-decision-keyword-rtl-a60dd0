// tb_fc_layer: random FC weights in a 1-cycle-latency memory model, random
// biases and activation streams; logits (round(sum/128), saturated) and the
// argmax are compared with an independent model, done must come two
// cycles after f_last. Then the training bias update is checked.
module tb_fc_layer;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_b_we = 0, bias_upd = 0, f_valid = 0, f_last = 0, w_re, done;
  logic [3:0] cfg_b_idx = 0, lr_shift = 0, cls;
  grad_t cfg_b_data = 0;
  err_t bias_err [10];
  logic [7:0] f_idx = 0, w_raddr;
  act_t f_data = 0;
  logic [79:0] w_rdata;
  act_t logits [10];
  fc_layer dut (.*);

  logic [79:0] wmem [192];
  always @(posedge clk) if (w_re) w_rdata <= wmem[w_raddr];

  int bias [10];
  int a [192];
  int t_last, t_done;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && done) t_done = int'($time / 10);

  task automatic run_and_check();
    int ref_l [10];
    int best;
    for (int i = 0; i < 192; i++) begin
      @(negedge clk);
      f_valid = 1; f_idx = 8'(i); f_data = act_t'(a[i]); f_last = (i == 191);
      if (i == 191) t_last = int'($time / 10);
    end
    @(negedge clk); f_valid = 0; f_last = 0;
    repeat (3) @(negedge clk);
    best = 0;
    for (int o = 0; o < 10; o++) begin
      int s;
      s = bias[o];
      for (int i = 0; i < 192; i++) s += a[i] * int'($signed(wmem[i][8*o +: 8]));
      s = (s + 64) >>> 7;
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      ref_l[o] = s;
      if (s > ref_l[best]) best = o;
      checks++;
      if (int'(logits[o]) != s) begin failures++; $display("logit %0d got %0d exp %0d", o, logits[o], s); end
    end
    checks++;
    if (int'(cls) != best) begin failures++; $display("class got %0d exp %0d", cls, best); end
    checks++;
    if (t_done - t_last != 2) begin failures++; $display("done latency %0d", t_done - t_last); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 192; i++) wmem[i] = {$urandom, $urandom, $urandom};
    for (int o = 0; o < 10; o++) begin
      bias[o] = int'($urandom % 4001) - 2000;
      @(negedge clk); cfg_b_we = 1; cfg_b_idx = 4'(o); cfg_b_data = grad_t'(bias[o]);
    end
    @(negedge clk); cfg_b_we = 0;
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < 192; i++) a[i] = (t == 5) ? 127 : int'($urandom % 33) - 16;
      run_and_check();
    end
    // bias update: bias -= (err << 4) >> lr_shift
    lr_shift = 4'd3;
    for (int o = 0; o < 10; o++) bias_err[o] = err_t'(int'($urandom % 256) - 128);
    @(negedge clk); bias_upd = 1;
    @(negedge clk); bias_upd = 0;
    for (int o = 0; o < 10; o++) bias[o] -= (int'(bias_err[o]) * 16) >>> 3;
    for (int i = 0; i < 192; i++) a[i] = int'($urandom % 33) - 16;
    run_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
