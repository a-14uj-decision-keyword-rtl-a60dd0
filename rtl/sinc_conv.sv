// sinc_conv: layer 1, the binarized sinc convolution on raw 8-bit audio.
//
// A 15-sample window of the input (two's complement samples) is held in a
// shift register. Eight processing elements (PEs) each compute one output
// channel per cycle: every tap XNORs the 8 bits of its sample with the
// tap's binary weight (weight 1 passes the sample, weight 0 inverts it,
// i.e. gives -x-1), the fifteen 8-bit results are added together with the
// channel's batch-norm bias, and the sign of the sum is the binary output
// (1 when the sum is >= 0). The 48 channels take six cycles. The binary
// outputs are max-pooled (ORed) over 4 consecutive positions.
//
// Interface and timing: one sample is accepted per in_valid/in_ready beat
// (1 cycle), and once 15 samples are in the window the six PE cycles follow;
// every 4th position sets out_valid with the 48-bit pooled vector, held
// until out_ready. clear restarts the window and the pooling. Weights
// (15 bits per channel, bit t for the t-th oldest sample) and 12-bit biases
// are written through the cfg ports.
// The PE count, 15x8 XNOR structure and the bias adder follow the paper;
// the sample format, the tie rule and the handshake are this design's.
module sinc_conv
  import kws_pkg::*;
#(
  parameter int unsigned N_PE   = 8,
  parameter int unsigned TAPS   = SINC_TAPS,
  parameter int unsigned C_OUT  = SINC_CH,
  parameter int unsigned POOL   = 4,
  parameter int unsigned BIAS_W = 12,
  localparam int unsigned N_CYC = C_OUT / N_PE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       cfg_w_we,
  input  logic                       cfg_b_we,
  input  logic [$clog2(C_OUT)-1:0]   cfg_ch,
  input  logic [TAPS-1:0]            cfg_w_data,
  input  logic signed [BIAS_W-1:0]   cfg_b_data,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic signed [7:0]          in_sample,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [C_OUT-1:0]           out_vec
);

  localparam int unsigned SW = BIAS_W + 1;

  logic [TAPS-1:0]          wgt  [C_OUT];
  logic signed [BIAS_W-1:0] bias [C_OUT];
  logic signed [7:0]        x    [TAPS];
  logic [$clog2(TAPS+1)-1:0] fill;
  logic                     run;
  logic [$clog2(N_CYC)-1:0] k;
  logic [$clog2(POOL)-1:0]  pcnt;
  logic [C_OUT-1:0]         pooled, pooled_nxt;
  logic [N_PE-1:0]          pe_bit;

  always_ff @(posedge clk) begin
    if (cfg_w_we) wgt[cfg_ch]  <= cfg_w_data;
    if (cfg_b_we) bias[cfg_ch] <= cfg_b_data;
  end

  // eight PEs: 15 x 8-bit XNOR, adder tree with the BN bias, sign
  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic signed [SW-1:0] sum;
    logic [$clog2(C_OUT)-1:0] ch;
    assign ch = ($clog2(C_OUT))'(int'(k) * N_PE + p);
    always_comb begin
      sum = SW'(bias[ch]);
      for (int t = 0; t < TAPS; t++)
        sum = sum + SW'(signed'(x[t] ~^ {8{wgt[ch][t]}}));
      pe_bit[p] = !sum[SW-1];
    end
  end

  always_comb begin
    pooled_nxt = pooled;
    if (run)
      for (int p = 0; p < N_PE; p++)
        pooled_nxt[int'(k) * N_PE + p] = (pcnt == 0) ? pe_bit[p]
                                         : (pooled[int'(k) * N_PE + p] | pe_bit[p]);
  end

  assign in_ready = !run && !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill      <= '0;
      run       <= 1'b0;
      k         <= '0;
      pcnt      <= '0;
      pooled    <= '0;
      out_valid <= 1'b0;
      out_vec   <= '0;
      for (int t = 0; t < TAPS; t++) x[t] <= '0;
    end else if (clear) begin
      fill      <= '0;
      run       <= 1'b0;
      k         <= '0;
      pcnt      <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int t = 0; t < TAPS - 1; t++) x[t] <= x[t + 1];
        x[TAPS - 1] <= in_sample;
        if (int'(fill) < TAPS) fill <= fill + 1'b1;
        if (int'(fill) >= TAPS - 1) begin
          run <= 1'b1;
          k   <= '0;
        end
      end
      if (run) begin
        pooled <= pooled_nxt;
        if (int'(k) == N_CYC - 1) begin
          run <= 1'b0;
          if (int'(pcnt) == POOL - 1) begin
            pcnt      <= '0;
            out_vec   <= pooled_nxt;
            out_valid <= 1'b1;
          end else begin
            pcnt <= pcnt + 1'b1;
          end
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
