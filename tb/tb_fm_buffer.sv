// tb_fm_buffer: random pushes and pops with random backpressure through a
// small feature map buffer; checks order and data against a queue model,
// that in_ready drops exactly when DEPTH entries are stored, and clear.
module tb_fm_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int W = 96, D = 5;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  fm_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] q [$];
  int full_seen = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && !clear) begin
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data !== q[0]) begin failures++; $display("pop mismatch"); end
      else void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
    if (!in_ready) full_seen++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = (t < 1500) ? ($urandom % 3 != 0) : ($urandom % 4 == 0);
      in_data   = {$urandom, $urandom, $urandom};
      out_ready = (t < 700) ? ($urandom % 4 == 0) : ($urandom % 2 == 0);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (30) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d entries lost", q.size()); end
    checks++;
    if (full_seen == 0) begin failures++; $display("buffer never filled"); end
    // fill DEPTH entries plus the output register and check in_ready
    out_ready = 0;
    for (int k = 0; k < D + 1; k++) begin
      @(negedge clk); in_valid = 1; in_data = W'(k);
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    checks++;
    if (in_ready || !out_valid) begin failures++; $display("in_ready high when full"); end
    clear = 1; q.delete();
    @(negedge clk); clear = 0;
    @(negedge clk);
    checks++;
    if (!in_ready || out_valid) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
