// tb_ce_module: random logits and labels; the error is compared with an
// independent model using real exp(): e = round(exp(z/16)*4096),
// p = floor(128 e / sum) (max 128), d = p - 128*[label], clamp 127,
// scaled = d + d>>>2 + d>>>3, clamp to 8 bits. A tolerance of 2 LSB covers
// the LUT's fixed point exp. Checks the 101-cycle latency.
module tb_ce_module;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done;
  act_t logits [10];
  logic [3:0] label = 0;
  err_t err [10];
  ce_module dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int z [10];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      real e [10];
      real sum;
      int cyc;
      for (int o = 0; o < 10; o++) begin
        z[o] = (t < 20) ? int'($urandom % 64) - 32 : int'($urandom % 256) - 128;
        if (t == 59) z[o] = (o == 3) ? 127 : -128;   // one dominant class
        logits[o] = act_t'(z[o]);
      end
      label = 4'($urandom % 10);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 101) begin failures++; $display("latency %0d", cyc); end
      sum = 0;
      for (int o = 0; o < 10; o++) begin
        e[o] = $floor($exp(z[o] / 16.0) * 4096.0 + 0.5);
        if (e[o] > 16777215.0) e[o] = 16777215.0;
        sum += e[o];
      end
      for (int o = 0; o < 10; o++) begin
        int p, d, s;
        p = int'($floor(128.0 * e[o] / sum));
        if (p > 128) p = 128;
        d = p - ((o == int'(label)) ? 128 : 0);
        if (d > 127) d = 127;
        s = d + (d >>> 2) + (d >>> 3);
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        checks++;
        if (int'(err[o]) - s > 2 || s - int'(err[o]) > 2) begin
          failures++; $display("t%0d o%0d z=%0d lab=%0d got %0d exp %0d", t, o, z[o], label, err[o], s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
