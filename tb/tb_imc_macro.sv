// tb_imc_macro: self-checking test of the IMC macro model. Random wordlines
// are written to all banks; random multi-read computes (1 to 4 wordline
// reads) are compared with an independent signed count of agreeing minus
// disagreeing bits, and the SA latency (one cycle after the last read) is
// checked. A second instance with a MAV offset checks the offset input.
module tb_imc_macro;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, cmp_en = 0, cmp_first = 0, cmp_last = 0;
  logic [2:0] wr_bank = 0;
  logic [5:0] wr_row = 0, cmp_row = 0;
  logic [63:0] wr_data = 0, rbl_in = 0;
  logic [7:0] sa_out, sa_out2;
  logic sa_valid, sa_valid2;

  imc_macro dut (.*);
  imc_macro #(.MAV_OFFSET('{40, -40, 0, 0, 0, 0, 0, 0})) dut2 (
    .clk, .rst_n, .wr_en, .wr_bank, .wr_row, .wr_data, .cmp_en, .cmp_first,
    .cmp_last, .cmp_row, .rbl_in, .sa_out(sa_out2), .sa_valid(sa_valid2));

  logic [63:0] mem [8][64];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc [8];
    int nrd;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 8; b++)
      for (int r = 0; r < 64; r++) begin
        mem[b][r] = {$urandom, $urandom};
        @(negedge clk);
        wr_en = 1; wr_bank = 3'(b); wr_row = 6'(r); wr_data = mem[b][r];
      end
    @(negedge clk) wr_en = 0;
    for (int trial = 0; trial < 300; trial++) begin
      nrd = 1 + ($urandom % 4);
      for (int b = 0; b < 8; b++) acc[b] = 0;
      for (int k = 0; k < nrd; k++) begin
        logic [63:0] x;
        logic [5:0]  r;
        r = 6'($urandom);
        x = {$urandom, $urandom};
        if (trial % 7 == 0) x = mem[0][r] ^ {32'h0, 32'hffff_0000};   // near tie
        @(negedge clk);
        cmp_en = 1; cmp_first = (k == 0); cmp_last = (k == nrd - 1);
        cmp_row = r; rbl_in = x;
        for (int b = 0; b < 8; b++)
          for (int c = 0; c < 64; c++) acc[b] += (x[c] == mem[b][r][c]) ? 1 : -1;
      end
      @(negedge clk);
      cmp_en = 0; cmp_first = 0; cmp_last = 0;
      checks++;
      if (!sa_valid) begin failures++; $display("sa_valid missing trial %0d", trial); end
      for (int b = 0; b < 8; b++) begin
        checks++;
        if (sa_out[b] !== (acc[b] >= 0)) begin
          failures++;
          $display("trial %0d bank %0d: sa=%0b acc=%0d", trial, b, sa_out[b], acc[b]);
        end
      end
      checks++;
      if (sa_out2[0] !== (acc[0] + 40 >= 0) || sa_out2[1] !== (acc[1] - 40 >= 0)) begin
        failures++; $display("offset model wrong trial %0d", trial);
      end
      @(negedge clk);
      checks++;
      if (sa_valid) begin failures++; $display("sa_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
