// imc_digital: digital domain computation behind the IMC macros of one
// binarized layer: BN decode, channel shuffle and max pooling.
//
// The macro returns raw sense-amplifier bits, eight channels per step.
// BN decode: batch norm with a negative scale reverses the direction of
// the threshold, which the in-memory bias alone cannot express, so a
// per-channel flip bit (a configuration register) inverts such channels.
// Channel shuffle: with G groups of n channels, channel g*n+i goes to
// i*G+g (ShuffleNet order), so the next group convolution sees channels of
// every group. Pooling: the max of binary values over POOL consecutive
// positions is their OR.
//
// Interface and timing: a result beat (res_valid, step res_idx, 8 bits)
// is absorbed in one cycle; the beat flagged res_last closes one
// convolution position. When POOL positions are closed the pooled vector
// is registered to out_vec with out_valid, held until out_ready. The
// controller must not close a position while out_valid is still pending.
// clear drops the pooling state at the start of a new utterance.
// The flip-bit encoding and the shuffle formula are this design's choices;
// the order decode -> shuffle -> pool follows the layer block diagram.
module imc_digital
  import kws_pkg::*;
#(
  parameter int unsigned C_OUT = 48,
  parameter int unsigned POOL  = 4,
  parameter int unsigned GROUPS = 2,
  localparam int unsigned N_STEP = C_OUT / IMC_BANKS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  // flip-bit configuration, 64 channels per write
  input  logic                        cfg_we,
  input  logic [1:0]                  cfg_chunk,
  input  logic [63:0]                 cfg_data,
  // raw SA results
  input  logic                        res_valid,
  input  logic [$clog2(N_STEP)-1:0]   res_idx,
  input  logic [IMC_BANKS-1:0]        res_bits,
  input  logic                        res_last,
  // pooled, shuffled output
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [C_OUT-1:0]            out_vec
);

  logic [C_OUT-1:0]          flip;
  logic [C_OUT-1:0]          pooled, pooled_nxt;
  logic [$clog2(POOL+1)-1:0] pcnt;
  logic                      first;

  assign first = (pcnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) flip <= '0;
    else if (cfg_we)
      for (int c = 0; c < C_OUT; c++)
        if (c / 64 == int'(cfg_chunk)) flip[c] <= cfg_data[c % 64];
  end

  // decode + shuffle + OR-pool, one channel per generate iteration
  for (genvar ch = 0; ch < C_OUT; ch++) begin : g_ch
    localparam int unsigned DST = shuffle_idx(ch, C_OUT, GROUPS);
    always_comb begin
      pooled_nxt[DST] = pooled[DST];
      if (res_valid && int'(res_idx) == ch / IMC_BANKS) begin
        if (first) pooled_nxt[DST] = res_bits[ch % IMC_BANKS] ^ flip[ch];
        else       pooled_nxt[DST] = pooled[DST] | (res_bits[ch % IMC_BANKS] ^ flip[ch]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pooled    <= '0;
      pcnt      <= '0;
      out_valid <= 1'b0;
      out_vec   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (clear) begin
        pooled <= '0;
        pcnt   <= '0;
      end else begin
        pooled <= pooled_nxt;
        if (res_valid && res_last) begin
          if (pcnt == POOL - 1) begin
            pcnt      <= '0;
            out_vec   <= pooled_nxt;
            out_valid <= 1'b1;
          end else begin
            pcnt <= pcnt + 1'b1;
          end
        end
      end
    end
  end

  // a position may only close when the output register is free
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (res_valid && res_last && pcnt == POOL - 1) |-> (!out_valid || out_ready));

endmodule
