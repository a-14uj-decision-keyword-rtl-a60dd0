// imc_layer: one binarized group-convolution layer computed in SRAM
// (layers 2..6 of the network): IMC controller, one or two IMC macros and
// the digital domain block.
//
// How it works: the controller keeps the last K=8 input vectors (C_IN
// binary channels each) in a flip-flop line buffer. When a new vector makes
// the window full, every output channel is computed: output o belongs to
// group g = o / (C_OUT/G) (G = C_IN/24 groups) and sees the 24 channels of
// its group over 8 taps, a 192-bit vector ordered tap-major (bit t*24+c).
// Eight outputs (one per bank) are computed per step; a step reads three
// weight wordlines with the three 64-bit slices of that vector and then
// the BN wordline with all-ones input, and the SAs fire. In a macro, step
// q uses rows 4q..4q+3. A layer with two macros keeps the first half of
// the output channels in macro 0 and the second half in macro 1 and runs
// them one after the other, so both macros only add capacity. The raw SA
// bits go to imc_digital (BN decode, shuffle, pooling).
//
// Timing: one cycle to accept an input vector, then 4 cycles per step,
// C_OUT/8 steps, plus one cycle for the last SA result. Inputs are refused
// (in_ready low) while computing or while a pooled output waits.
// Test mode: from idle, test_start runs one step (index test_step) on the
// 192-bit test_pat instead of the line buffer and returns the raw SA bits
// in test_res with test_done; this lets the variation of each macro be
// measured from outside.
// Follows the paper: binary inputs and weights, in-memory BN as a bias
// wordline, 7 macros over the layers, line buffer in flip-flops. Own
// choices: the row map, step order and the handshakes.
module imc_layer
  import kws_pkg::*;
#(
  parameter int unsigned C_IN     = 48,
  parameter int unsigned C_OUT    = 48,
  parameter int unsigned POOL     = 4,
  parameter int unsigned N_MACROS = 1,
  parameter int MAV_OFFSET [IMC_BANKS] = '{default: 0},
  localparam int unsigned GROUPS  = C_IN / GROUP_SIZE,
  localparam int unsigned N_STEP  = C_OUT / IMC_BANKS,
  localparam int unsigned STEP_W  = (N_STEP > 1) ? $clog2(N_STEP) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  // configuration
  input  logic                cfg_w_we,     // weight / BN row write
  input  logic                cfg_w_macro,
  input  logic [2:0]          cfg_w_bank,
  input  logic [5:0]          cfg_w_row,
  input  logic [63:0]         cfg_w_data,
  input  logic                cfg_f_we,     // BN flip bits
  input  logic [1:0]          cfg_f_chunk,
  input  logic [63:0]         cfg_f_data,
  // input feature stream
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [C_IN-1:0]     in_vec,
  // output feature stream
  output logic                out_valid,
  input  logic                out_ready,
  output logic [C_OUT-1:0]    out_vec,
  // test mode
  input  logic                test_start,
  input  logic [STEP_W-1:0]   test_step,
  input  logic [WIN_BITS-1:0] test_pat,
  output logic                test_done,
  output logic [IMC_BANKS-1:0] test_res
);

  localparam int unsigned STEPS_PER_MACRO = N_STEP / N_MACROS;
  localparam int unsigned N_PER_GROUP     = C_OUT / GROUPS;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [C_IN-1:0]     win [CONV_K];
  logic [3:0]          fill;
  logic [STEP_W-1:0]   q, res_q;
  logic [1:0]          phase;
  logic                test_mode;
  logic [WIN_BITS-1:0] grp_vec;
  logic [IMC_COLS-1:0] rbl;
  logic [$clog2(N_MACROS+1)-1:0] msel;
  logic [5:0]          row;
  logic                dig_out_valid;

  // 192-bit window of the group of step q
  always_comb begin
    int unsigned g;
    g = (int'(q) * IMC_BANKS) / N_PER_GROUP;
    grp_vec = '0;
    for (int t = 0; t < CONV_K; t++)
      for (int c = 0; c < GROUP_SIZE; c++)
        for (int gg = 0; gg < GROUPS; gg++)
          if (gg == g) grp_vec[t * GROUP_SIZE + c] = win[t][gg * GROUP_SIZE + c];
    if (test_mode) grp_vec = test_pat;
  end

  always_comb begin
    rbl = '1;                                   // BN row: all inputs 1
    for (int s = 0; s < N_SEG; s++)
      if (int'(phase) == s) rbl = grp_vec[s * IMC_COLS +: IMC_COLS];
  end

  assign msel = ($clog2(N_MACROS+1))'(int'(q) / STEPS_PER_MACRO);
  assign row  = 6'((int'(q) % STEPS_PER_MACRO) * 4 + int'(phase));

  assign in_ready = (state == S_IDLE) && !dig_out_valid && !test_start;

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      fill      <= '0;
      q         <= '0;
      res_q     <= '0;
      phase     <= '0;
      test_mode <= 1'b0;
      for (int t = 0; t < CONV_K; t++) win[t] <= '0;
    end else if (clear) begin
      state     <= S_IDLE;
      fill      <= '0;
      phase     <= '0;
      test_mode <= 1'b0;
    end else begin
      case (state)
        S_IDLE: begin
          if (test_start) begin
            test_mode <= 1'b1;
            q         <= test_step;
            phase     <= '0;
            state     <= S_RUN;
          end else if (in_valid && in_ready) begin
            for (int t = 0; t < CONV_K - 1; t++) win[t] <= win[t + 1];
            win[CONV_K - 1] <= in_vec;
            if (fill < CONV_K) fill <= fill + 1'b1;
            if (fill >= CONV_K - 1) begin
              q     <= '0;
              phase <= '0;
              state <= S_RUN;
            end
          end
        end
        S_RUN: begin
          phase <= phase + 1'b1;
          if (phase == 2'd3) begin
            res_q <= q;
            if (test_mode || int'(q) == N_STEP - 1) state <= S_DRAIN;
            else q <= q + 1'b1;
          end
        end
        default: begin                          // S_DRAIN
          state     <= S_IDLE;
          test_mode <= 1'b0;
        end
      endcase
    end
  end

  // ---------------------------------------------------------------- macros
  logic [IMC_BANKS-1:0] sa   [N_MACROS];
  logic [N_MACROS-1:0]  sa_v;
  logic [IMC_BANKS-1:0] sa_sel;
  logic                 sa_any;

  for (genvar m = 0; m < N_MACROS; m++) begin : g_macro
    imc_macro #(.N_BANKS(IMC_BANKS), .ROWS(IMC_ROWS), .COLS(IMC_COLS),
                .MAV_OFFSET(MAV_OFFSET)) u_uce (
      .clk, .rst_n,
      .wr_en    (cfg_w_we && (int'(cfg_w_macro) == m)),
      .wr_bank  (cfg_w_bank),
      .wr_row   (cfg_w_row),
      .wr_data  (cfg_w_data),
      .cmp_en   (state == S_RUN && int'(msel) == m),
      .cmp_first(phase == 2'd0),
      .cmp_last (phase == 2'd3),
      .cmp_row  (row),
      .rbl_in   (rbl),
      .sa_out   (sa[m]),
      .sa_valid (sa_v[m])
    );
  end

  always_comb begin
    sa_sel = '0;
    for (int m = 0; m < N_MACROS; m++) if (sa_v[m]) sa_sel = sa[m];
  end
  assign sa_any = |sa_v;

  // test result capture
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      test_done <= 1'b0;
      test_res  <= '0;
    end else begin
      test_done <= sa_any && test_mode;
      if (sa_any && test_mode) test_res <= sa_sel;
    end
  end

  // ---------------------------------------------------------------- digital
  imc_digital #(.C_OUT(C_OUT), .POOL(POOL), .GROUPS(GROUPS)) u_dig (
    .clk, .rst_n, .clear,
    .cfg_we   (cfg_f_we),
    .cfg_chunk(cfg_f_chunk),
    .cfg_data (cfg_f_data),
    .res_valid(sa_any && !test_mode),
    .res_idx  (res_q),
    .res_bits (sa_sel),
    .res_last (int'(res_q) == N_STEP - 1),
    .out_valid(dig_out_valid),
    .out_ready(out_ready),
    .out_vec  (out_vec)
  );
  assign out_valid = dig_out_valid;

  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready && !clear) |=> in_valid);

endmodule
