// tb_test_reg: shifts random patterns into the test register (LSB first),
// checks the parallel pattern, captures results and checks the serial
// result bits on so.
module tb_test_reg;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic shift = 0, si = 0, so, res_load = 0;
  logic [191:0] pattern, pat;
  logic [7:0] res_in = 0, r;
  test_reg dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      pat = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      r = 8'($urandom);
      @(negedge clk); res_load = 1; res_in = r;
      @(negedge clk); res_load = 0;
      for (int k = 0; k < 192; k++) begin
        if (k < 8) begin
          checks++;
          if (so !== r[k]) begin failures++; $display("so bit %0d wrong", k); end
        end
        shift = 1; si = pat[k];
        @(negedge clk);
      end
      shift = 0;
      checks++;
      if (pattern !== pat) begin failures++; $display("pattern mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
