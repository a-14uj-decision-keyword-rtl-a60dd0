// tb_gap: feeds N_POS random 192-bit vectors (with random idle cycles),
// then checks the 192 streamed activations against round(16*(2c-N)/N)
// computed with real arithmetic, the out_last flag and the index order.
// Two utterances are run to check the counters restart.
module tb_gap;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 55;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_last;
  logic [191:0] in_vec = 0;
  logic [7:0] out_idx;
  act_t out_data;
  gap #(.C(192), .N_POS(N)) dut (.*);

  int cnt [192];
  int n_seen = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real r; int e;
    r = 16.0 * (2.0 * cnt[out_idx] - N) / N;
    e = (r >= 0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
    checks++;
    if (int'(out_data) != e || int'(out_idx) != n_seen % 192 ||
        out_last != (out_idx == 191)) begin
      failures++; $display("ch %0d: got %0d exp %0d", out_idx, out_data, e);
    end
    n_seen++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 2; u++) begin
      for (int c = 0; c < 192; c++) cnt[c] = 0;
      for (int p = 0; p < N; p++) begin
        logic [191:0] v;
        v = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        if (p < 20 && u == 1) v = '1;       // drive some channels to saturation
        for (int c = 0; c < 192; c++) cnt[c] += v[c];
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_vec = v;
        @(negedge clk); in_valid = 0;
        if ($urandom % 2) @(negedge clk);
      end
      repeat (200) @(negedge clk);
    end
    checks++;
    if (n_seen != 384) begin failures++; $display("saw %0d outputs", n_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
