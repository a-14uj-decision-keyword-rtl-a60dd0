// tb_sinc_conv: loads random sinc weights and biases, streams random audio
// and compares every pooled 48-bit output with an independent model
// (signed weighted sum with +x for weight 1 and -x-1 for weight 0, plus
// bias, sign, OR over 4 positions). Also checks the 7-cycle sample rate
// (1 accept + 6 PE cycles) once the window is full.
module tb_sinc_conv;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, cfg_w_we = 0, cfg_b_we = 0;
  logic [5:0] cfg_ch = 0;
  logic [14:0] cfg_w_data = 0;
  logic signed [11:0] cfg_b_data = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic signed [7:0] in_sample = 0;
  logic [47:0] out_vec;

  sinc_conv dut (.*);

  logic [14:0] w [48];
  int bias [48];
  int xs [200];
  localparam int NS = 15 + 4 * 30 + 2;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected outputs
  logic [47:0] expv [40];
  int n_out = 0;
  logic bp_en = 1;
  always @(negedge clk) out_ready <= bp_en ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_vec !== expv[n_out]) begin
      failures++; $display("output %0d: got %h exp %h", n_out, out_vec, expv[n_out]);
    end
    n_out++;
  end

  initial begin
    int t_acc [NS];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 48; c++) begin
      w[c] = 15'($urandom); bias[c] = int'($urandom % 301) - 150;
      @(negedge clk); cfg_w_we = 1; cfg_b_we = 1; cfg_ch = 6'(c);
      cfg_w_data = w[c]; cfg_b_data = 12'(bias[c]);
    end
    @(negedge clk); cfg_w_we = 0; cfg_b_we = 0;
    for (int i = 0; i < NS; i++) xs[i] = int'($urandom % 256) - 128;
    // model
    for (int p = 0; p + 15 <= NS; p++) begin
      if (p % 4 == 0) expv[p / 4] = '0;
      for (int c = 0; c < 48; c++) begin
        int s;
        s = bias[c];
        for (int t = 0; t < 15; t++) s += w[c][t] ? xs[p + t] : -xs[p + t] - 1;
        if (s >= 0) expv[p / 4][c] = 1'b1;
      end
    end
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      in_valid = 1; in_sample = 8'(xs[i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t_acc[i] = int'($time / 10);
    end
    @(negedge clk) in_valid = 0; bp_en = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != (NS - 14) / 4) begin failures++; $display("got %0d outputs", n_out); end
    checks++;
    if (t_acc[20] - t_acc[19] != 7) begin
      failures++; $display("sample period %0d, expected 7", t_acc[20] - t_acc[19]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
