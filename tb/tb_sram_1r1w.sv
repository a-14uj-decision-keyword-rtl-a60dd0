// tb_sram_1r1w: checks write, one-cycle read latency, read-hold and
// read-during-write (old data) of the generic memory against a shadow array.
module tb_sram_1r1w;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] shadow [64];
  sram_1r1w #(.WIDTH(16), .DEPTH(64)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = 16'($urandom); shadow[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 500; t++) begin
      logic [15:0] exp_d;
      @(negedge clk);
      re = 1; raddr = 6'($urandom);
      we = $urandom % 2; waddr = ($urandom % 2) ? raddr : 6'($urandom); wdata = 16'($urandom);
      exp_d = shadow[raddr];
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata !== exp_d) begin failures++; $display("read %0d got %h exp %h", raddr, rdata, exp_d); end
      @(negedge clk);
      checks++;
      if (rdata !== exp_d) begin failures++; $display("read data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
