// tb_sga_module: clears the gradient memory, accumulates error x feature
// for three samples (MAC & clamp, with some large values to hit the 16-bit
// clamp), then runs an update pass and compares gradient memory, FC
// weights and the update count with an independent model of small
// gradient accumulation; a second update pass checks that skipped
// gradients are kept and used ones were reset.
module tb_sga_module;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  grad_t thr = 0;
  logic [3:0] lr_shift = 0;
  logic acc_valid = 0, upd_start = 0, clr_start = 0, busy, done;
  logic [7:0] acc_idx = 0;
  act_t acc_data = 0;
  err_t err [10];
  logic [15:0] n_updates;
  logic g_re, g_we, w_re, w_we;
  logic [7:0] g_raddr, g_waddr, w_raddr, w_waddr;
  logic [159:0] g_rdata, g_wdata;
  logic [79:0] w_rdata, w_wdata;
  logic tb_we = 0;
  logic [7:0] tb_waddr = 0;
  logic [79:0] tb_wdata = 0;

  sga_module dut (.*);
  sram_1r1w #(.WIDTH(160), .DEPTH(192)) u_gm (.clk, .we(g_we), .waddr(g_waddr),
    .wdata(g_wdata), .re(g_re), .raddr(g_raddr), .rdata(g_rdata));
  sram_1r1w #(.WIDTH(80), .DEPTH(192)) u_wm (.clk, .we(w_we || tb_we),
    .waddr(tb_we ? tb_waddr : w_waddr), .wdata(tb_we ? tb_wdata : w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata));

  int G [192][10];
  int Wt [192][10];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_done();
    @(negedge clk);
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic compare(string what);
    for (int i = 0; i < 192; i++)
      for (int o = 0; o < 10; o++) begin
        checks++;
        if (int'($signed(u_gm.mem[i][16*o +: 16])) != G[i][o] ||
            int'($signed(u_wm.mem[i][8*o +: 8])) != Wt[i][o]) begin
          failures++;
          if (failures < 10)
            $display("%s: [%0d][%0d] g %0d/%0d w %0d/%0d", what, i, o,
                     $signed(u_gm.mem[i][16*o +: 16]), G[i][o],
                     $signed(u_wm.mem[i][8*o +: 8]), Wt[i][o]);
        end
      end
  endtask

  task automatic upd_pass();
    int nu = 0;
    @(negedge clk); upd_start = 1;
    @(negedge clk); upd_start = 0;
    wait_done();
    for (int i = 0; i < 192; i++)
      for (int o = 0; o < 10; o++) begin
        int g, m, nw;
        g = G[i][o];
        m = (g < 0) ? -g : g;
        if (m >= int'(thr)) begin
          nw = Wt[i][o] - ((g + (1 <<< (int'(lr_shift) + 3))) >>> (int'(lr_shift) + 4));
          if (nw > 127) nw = 127;
          if (nw < -128) nw = -128;
          if (nw != Wt[i][o]) nu++;
          Wt[i][o] = nw;
          G[i][o] = 0;
        end
      end
    compare("update");
    checks++;
    if (int'(n_updates) != nu) begin failures++; $display("n_updates %0d exp %0d", n_updates, nu); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 192; i++) begin
      logic [79:0] w;
      w = {$urandom, $urandom, $urandom};
      for (int o = 0; o < 10; o++) Wt[i][o] = int'($signed(w[8*o +: 8]));
      @(negedge clk); tb_we = 1; tb_waddr = 8'(i); tb_wdata = w;
    end
    @(negedge clk); tb_we = 0;
    @(negedge clk); clr_start = 1;
    @(negedge clk); clr_start = 0;
    wait_done();
    for (int i = 0; i < 192; i++) for (int o = 0; o < 10; o++) G[i][o] = 0;
    compare("clear");
    for (int s = 0; s < 3; s++) begin
      int a [192];
      for (int o = 0; o < 10; o++) err[o] = err_t'(int'($urandom % 256) - 128);
      for (int i = 0; i < 192; i++) a[i] = (i < 4) ? 127 : int'($urandom % 256) - 128;
      for (int i = 0; i < 192; i++) begin
        @(negedge clk); acc_valid = 1; acc_idx = 8'(i); acc_data = act_t'(a[i]);
        if ($urandom % 4 == 0) begin @(negedge clk); acc_valid = 0; end
      end
      @(negedge clk); acc_valid = 0;
      @(negedge clk);
      for (int i = 0; i < 192; i++)
        for (int o = 0; o < 10; o++) begin
          G[i][o] += int'(err[o]) * a[i];
          if (G[i][o] > 32767) G[i][o] = 32767;
          if (G[i][o] < -32768) G[i][o] = -32768;
        end
    end
    compare("accumulate");
    thr = 16'sd12000; lr_shift = 4'd3;
    upd_pass();
    thr = 16'sd4000; lr_shift = 4'd2;
    upd_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
