// gap: global average pooling of the last binarized layer.
//
// One counter per channel counts the ones among the N_POS binary vectors of
// an utterance. Binary 1/0 stands for +1/-1, so the average is
// (2*count - N_POS) / N_POS. It is converted to the classifier's activation
// format (1 sign, 3 integer, 4 fraction bits) by
//   act = round(16 * (2*count - N_POS) / N_POS)   (halves away from zero)
// using one divider by the constant N_POS, one channel per cycle.
//
// Interface and timing: in_valid/in_ready accepts one C-bit vector per
// cycle. After the N_POS-th vector the module streams the C activations,
// one per cycle (out_valid, out_idx, out_data, out_last on the final one),
// with no backpressure, then clears its counters for the next utterance.
// Inputs are refused while streaming. The value encoding and the rounding
// are this design's choices; the paper names the layer only.
module gap
  import kws_pkg::*;
#(
  parameter int unsigned C     = 192,
  parameter int unsigned N_POS = 55,
  localparam int unsigned CW   = $clog2(N_POS + 1),
  localparam int unsigned IW   = $clog2(C)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [C-1:0]  in_vec,
  output logic          out_valid,
  output logic [IW-1:0] out_idx,
  output act_t          out_data,
  output logic          out_last
);

  logic [CW-1:0] cnt [C];
  logic [CW-1:0] npos;
  logic          emit;
  logic [IW-1:0] idx;
  logic signed [CW+6:0] num, q;

  assign in_ready = !emit;

  localparam logic signed [CW+6:0] NS  = (CW+7)'(N_POS);
  localparam logic signed [CW+6:0] NS2 = (CW+7)'(N_POS / 2);

  always_comb begin
    num = ((CW+7)'(cnt[idx]) * 2 - NS) * 16;
    if (num >= 0) q = (num + NS2) / NS;
    else          q = (num - NS2) / NS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      npos      <= '0;
      emit      <= 1'b0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      out_last  <= 1'b0;
      for (int c = 0; c < C; c++) cnt[c] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (clear) begin
        npos <= '0;
        emit <= 1'b0;
        idx  <= '0;
        for (int c = 0; c < C; c++) cnt[c] <= '0;
      end else if (emit) begin
        out_valid <= 1'b1;
        out_idx   <= idx;
        out_data  <= act_t'(q);
        out_last  <= (int'(idx) == C - 1);
        if (int'(idx) == C - 1) begin
          emit <= 1'b0;
          idx  <= '0;
          npos <= '0;
          for (int c = 0; c < C; c++) cnt[c] <= '0;
        end else begin
          idx <= idx + 1'b1;
        end
      end else if (in_valid) begin
        for (int c = 0; c < C; c++) cnt[c] <= cnt[c] + CW'(in_vec[c]);
        if (int'(npos) == N_POS - 1) emit <= 1'b1;
        npos <= npos + 1'b1;
      end
    end
  end

endmodule
