// tb_train_ctrl: drives the training sequencer with behavioural models of
// its partners (feature memory, FC layer, error unit and SGA module, each
// answering after a random delay) and checks the order of the flow: one
// clear, per sample an FC stream then an SGA stream of 192 features read
// from addresses s*192+i with the right data, one error-unit start and one
// bias update per sample, one update pass per epoch, and a single done.
module tb_train_ctrl;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int MB = 6;
  logic start = 0, busy, done;
  logic [2:0] n_samples = 0;
  logic [9:0] n_epochs = 0, epoch;
  logic [2:0] sample;
  logic fm_re;
  logic [$clog2(MB*192)-1:0] fm_raddr;
  act_t fm_rdata, st_data;
  logic st_valid, st_last, st_to_fc;
  logic [7:0] st_idx;
  logic fc_done = 0, ce_start, ce_done = 0, bias_upd, sga_clr_start, sga_upd_start;
  logic sga_done = 0, sga_busy = 0;

  train_ctrl #(.MAX_BATCH(MB), .N_IN(192)) dut (.*);

  // feature memory model: data is a hash of the address, registered read
  always_ff @(posedge clk) if (fm_re) fm_rdata <= act_t'((fm_raddr * 37) ^ (fm_raddr >> 3));

  int n_clr = 0, n_upd = 0, n_fc = 0, n_sga = 0, n_ce = 0, n_bias = 0, n_done = 0;
  int exp_i = 0, cur_s = 0, order_err = 0;
  int fc_cnt = -1, ce_cnt = -1, sga_cnt = -1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    // responders
    fc_done <= 1'b0; ce_done <= 1'b0; sga_done <= 1'b0;
    if (fc_cnt > 0) fc_cnt--; else if (fc_cnt == 0) begin fc_done <= 1'b1; fc_cnt = -1; end
    if (ce_cnt > 0) ce_cnt--; else if (ce_cnt == 0) begin ce_done <= 1'b1; ce_cnt = -1; end
    if (sga_cnt > 0) sga_cnt--; else if (sga_cnt == 0) begin sga_done <= 1'b1; sga_busy <= 1'b0; sga_cnt = -1; end
    if (sga_clr_start) begin n_clr++; sga_busy <= 1'b1; sga_cnt = 5 + $urandom % 20; end
    if (sga_upd_start) begin n_upd++; sga_busy <= 1'b1; sga_cnt = 5 + $urandom % 20; end
    if (ce_start) begin n_ce++; ce_cnt = $urandom % 30; end
    if (bias_upd) n_bias++;
    if (done) n_done++;
    if (st_valid) begin
      int a;
      a = int'(sample) * 192 + int'(st_idx);
      checks++;
      if (int'(st_idx) != exp_i || st_data != act_t'((a * 37) ^ (a >> 3))) begin
        failures++; $display("stream idx %0d exp %0d data %0d", st_idx, exp_i, st_data);
      end
      exp_i = (exp_i + 1) % 192;
      if (st_last) begin
        if (st_to_fc) begin n_fc++; fc_cnt = 1 + $urandom % 4; end
        else n_sga++;
        checks++;
        if (int'(st_idx) != 191) failures++;
      end
    end
  end

  task automatic run(int ns, int ne);
    n_clr = 0; n_upd = 0; n_fc = 0; n_sga = 0; n_ce = 0; n_bias = 0; n_done = 0;
    @(negedge clk); n_samples = 3'(ns); n_epochs = 10'(ne); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 7;
    if (n_clr != 1) failures++;
    if (n_upd != ne) failures++;
    if (n_fc != ns * ne) failures++;
    if (n_sga != ns * ne) failures++;
    if (n_ce != ns * ne) failures++;
    if (n_bias != ns * ne) failures++;
    if (n_done != 1) failures++;
    $display("run %0d x %0d: clr %0d upd %0d fc %0d sga %0d ce %0d bias %0d done %0d",
             ns, ne, n_clr, n_upd, n_fc, n_sga, n_ce, n_bias, n_done);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    checks++; if (busy) failures++;
    run(3, 2);
    run(1, 1);
    run(6, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
