// ce_module: output error of the softmax cross-entropy loss for on-chip
// training, with error scaling.
//
// For a softmax followed by cross-entropy, the error at logit i is
// p_i - y_i with p_i = exp(z_i) / sum_j exp(z_j) and y the one-hot label.
// The steps, one unit each:
//   1. exp LUT: the logits are 8-bit Q3.4 values, so a 256-entry table
//      holds exp(z) for every one (unsigned Q12.12, filled at elaboration
//      by kws_pkg::exp_q12); 10 cycles, the results go to a 10-entry
//      register file and into an accumulator.
//   2. 8-bit fixed point division: p_i = floor(128 * e_i / sum) by
//      restoring division, 8 cycles per class (Q0.7, 128 saturates to 127).
//   3. minus label: 128 (= 1.0) is subtracted for the labelled class.
//   4. error scaling by 1.375 with shift and add, e + e>>>2 + e>>>3, and
//      clamping to 8 bits.
// Interface and timing: start latches logits and label; done pulses
// 1 + 10 + 10*9 cycles later (9 = 8 division steps + 1 output step per
// class), with err[] valid until the next start.
// The LUT, the 8-bit division and the x1.375 shift-and-add scaling follow
// the paper; the table format and the divider type are this design's.
module ce_module
  import kws_pkg::*;
#(
  parameter int unsigned N_OUT = N_CLASSES,
  localparam int unsigned LW   = $clog2(N_OUT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  act_t          logits [N_OUT],
  input  logic [LW-1:0] label,
  output logic          busy,
  output logic          done,
  output err_t          err [N_OUT]
);

  localparam int unsigned SW = EXP_W + 4;   // sum of 10 entries

  exp_t lut [256];
  for (genvar n = 0; n < 256; n++) begin : g_lut
    localparam exp_t V = exp_q12(n - 128);
    assign lut[n] = V;
  end

  typedef enum logic [1:0] {C_IDLE, C_EXP, C_DIV, C_OUT} state_e;
  state_e state;

  act_t           z   [N_OUT];
  exp_t           e   [N_OUT];
  logic [SW-1:0]  sum;
  logic [SW-1:0]  rem;
  logic [7:0]     quo;
  logic [LW-1:0]  i, lab;
  logic [3:0]     bitn;

  assign busy = (state != C_IDLE);

  function automatic err_t scale_clamp(logic signed [8:0] d);
    logic signed [10:0] s;
    s = 11'(d) + (11'(d) >>> 2) + (11'(d) >>> 3);
    if (s > 127)       return err_t'(127);
    else if (s < -128) return err_t'(-128);
    else               return err_t'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      sum <= '0; rem <= '0; quo <= '0; i <= '0; lab <= '0; bitn <= '0;
      done <= 1'b0;
      for (int o = 0; o < N_OUT; o++) begin
        z[o] <= '0; e[o] <= '0; err[o] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          for (int o = 0; o < N_OUT; o++) z[o] <= logits[o];
          lab   <= label;
          sum   <= '0;
          i     <= '0;
          state <= C_EXP;
        end
        C_EXP: begin
          e[i] <= lut[8'(z[i]) ^ 8'h80];
          sum  <= sum + SW'(lut[8'(z[i]) ^ 8'h80]);
          if (int'(i) == N_OUT - 1) begin
            i     <= '0;
            bitn  <= '0;
            state <= C_DIV;
          end else i <= i + 1'b1;
        end
        C_DIV: begin
          // restoring division, quotient bit 7 first
          if (bitn == 0) begin
            if (SW'(e[i]) >= sum) begin rem <= SW'(e[i]) - sum; quo <= 8'h80; end
            else                  begin rem <= SW'(e[i]);       quo <= 8'h00; end
            bitn <= 4'd1;
          end else begin
            logic [SW:0] r2;
            r2 = {rem, 1'b0};
            if (r2 >= (SW+1)'(sum)) begin
              rem <= SW'(r2 - (SW+1)'(sum));
              quo[4'd7 - bitn[2:0]] <= 1'b1;
            end else begin
              rem <= SW'(r2);
            end
            if (bitn == 4'd7) begin
              bitn  <= '0;
              state <= C_OUT;
            end else bitn <= bitn + 1'b1;
          end
        end
        default: begin   // C_OUT: minus label, scale, clamp
          logic signed [8:0] p, d;
          p = (quo == 8'h80) ? 9'sd128 : $signed({1'b0, quo});
          d = p - ((i == lab) ? 9'sd128 : 9'sd0);
          if (d > 127) d = 9'sd127;
          err[i] <= scale_clamp(d);
          if (int'(i) == N_OUT - 1) begin
            state <= C_IDLE;
            done  <= 1'b1;
          end else begin
            i     <= i + 1'b1;
            state <= C_DIV;
          end
        end
      endcase
    end
  end

endmodule
