// fc_layer: the fully connected classifier, 192 activations -> 10 logits.
//
// Activations arrive as a stream, one per cycle (Q3.4, from the GAP during
// inference or from the feature memory during training). For each one the
// weight word of that input index is read from the FC weight memory; a word
// holds the 10 weights (Q0.7) of that input, so ten multiply-accumulates
// run in parallel. Products and biases are kept in units of 2^-11. After
// the last activation the sums are rounded and saturated to Q3.4 logits
// and the index of the largest one (lowest index on a tie) is the decision.
//
// Biases (16 bits, units of 2^-11) live in registers: they can be written
// through cfg_b_* and, during training, updated in place by
// bias <- bias - ((err << 4) >>> lr_shift) from the scaled output error.
//
// Interface and timing: f_valid/f_idx/f_data/f_last, no backpressure; the
// weight read is issued in the same cycle (w_re, w_raddr) and used one
// cycle later, so done pulses two cycles after f_last, with logits and
// class stable until the next stream. 192 cycles per decision.
// Formats follow the paper's classifier quantisation; the memory word
// organisation and the bias format are this design's.
module fc_layer
  import kws_pkg::*;
#(
  parameter int unsigned N_IN  = FEAT_CH,
  parameter int unsigned N_OUT = N_CLASSES,
  localparam int unsigned IW   = $clog2(N_IN),
  localparam int unsigned AW   = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // bias configuration and training update
  input  logic                      cfg_b_we,
  input  logic [$clog2(N_OUT)-1:0]  cfg_b_idx,
  input  grad_t                     cfg_b_data,
  input  logic                      bias_upd,
  input  err_t                      bias_err [N_OUT],
  input  logic [3:0]                lr_shift,
  // activation stream
  input  logic                      f_valid,
  input  logic [IW-1:0]             f_idx,
  input  act_t                      f_data,
  input  logic                      f_last,
  // weight memory read port
  output logic                      w_re,
  output logic [IW-1:0]             w_raddr,
  input  logic [8*N_OUT-1:0]        w_rdata,
  // result
  output logic                      done,
  output act_t                      logits [N_OUT],
  output logic [$clog2(N_OUT)-1:0]  cls
);

  grad_t                bias [N_OUT];
  logic signed [AW-1:0] acc  [N_OUT];
  logic signed [AW-1:0] acc_nxt [N_OUT];
  logic                 v_d, first_d, last_d;
  act_t                 a_d;

  assign w_re    = f_valid;
  assign w_raddr = f_idx;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      acc_nxt[o] = (first_d ? AW'(bias[o]) : acc[o])
                 + AW'(a_d * $signed(w_rdata[8*o +: 8]));
    end
  end

  function automatic act_t to_logit(logic signed [AW-1:0] a);
    logic signed [AW-1:0] r;
    r = (a + AW'(64)) >>> 7;
    if (r > 127)       return act_t'(127);
    else if (r < -128) return act_t'(-128);
    else               return act_t'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= 1'b0; first_d <= 1'b0; last_d <= 1'b0; a_d <= '0;
      done <= 1'b0;
      for (int o = 0; o < N_OUT; o++) begin
        acc[o] <= '0; logits[o] <= '0; bias[o] <= '0;
      end
    end else begin
      v_d     <= f_valid;
      first_d <= f_valid && (f_idx == 0);
      last_d  <= f_valid && f_last;
      a_d     <= f_data;
      done    <= 1'b0;
      if (v_d) begin
        for (int o = 0; o < N_OUT; o++) acc[o] <= acc_nxt[o];
        if (last_d) begin
          for (int o = 0; o < N_OUT; o++) logits[o] <= to_logit(acc_nxt[o]);
          done <= 1'b1;
        end
      end
      if (cfg_b_we) bias[cfg_b_idx] <= cfg_b_data;
      else if (bias_upd)
        for (int o = 0; o < N_OUT; o++) begin
          logic signed [17:0] d, nb;
          d  = (18'(bias_err[o]) <<< 4) >>> lr_shift;
          nb = 18'(bias[o]) - d;
          if (nb > 32767)       bias[o] <= 16'sh7fff;
          else if (nb < -32768) bias[o] <= 16'sh8000;
          else                  bias[o] <= grad_t'(nb);
        end
    end
  end

  always_comb begin
    cls = '0;
    for (int o = 1; o < N_OUT; o++)
      if (logits[o] > logits[cls]) cls = ($clog2(N_OUT))'(o);
  end

endmodule
