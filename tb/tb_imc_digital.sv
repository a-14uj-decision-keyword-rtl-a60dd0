// tb_imc_digital: drives random SA result beats (6 steps x 8 bits per
// position) with random flip bits and checks each pooled output against an
// independent model: flip, ShuffleNet permutation (g*24+i -> i*2+g), OR
// over 4 positions. Output backpressure is exercised.
module tb_imc_digital;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear = 0, cfg_we = 0, res_valid = 0, res_last = 0, out_valid, out_ready = 1;
  logic [1:0] cfg_chunk = 0;
  logic [63:0] cfg_data = 0;
  logic [2:0] res_idx = 0;
  logic [7:0] res_bits = 0;
  logic [47:0] out_vec, flip, expv;
  imc_digital #(.C_OUT(48), .POOL(4), .GROUPS(2)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    flip = {$urandom, $urandom};
    @(negedge clk); cfg_we = 1; cfg_chunk = 0; cfg_data = {16'h0, flip};
    @(negedge clk); cfg_we = 0;
    for (int w = 0; w < 20; w++) begin
      expv = '0;
      out_ready = 0;
      for (int p = 0; p < 4; p++) begin
        for (int q = 0; q < 6; q++) begin
          @(negedge clk);
          res_valid = 1; res_idx = 3'(q); res_bits = 8'($urandom);
          res_last = (q == 5);
          for (int b = 0; b < 8; b++) begin
            int ch, dst;
            ch = q * 8 + b;
            dst = (ch % 24) * 2 + ch / 24;
            if (res_bits[b] ^ flip[ch]) expv[dst] = 1'b1;
          end
        end
        @(negedge clk); res_valid = 0; res_last = 0;
      end
      @(negedge clk);
      checks++;
      if (!out_valid || out_vec !== expv) begin
        failures++; $display("window %0d: got %h exp %h v=%0b", w, out_vec, expv, out_valid);
      end
      out_ready = 1;
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
