// sga_module: gradient computation and small gradient accumulation (SGA)
// for the on-chip fine-tuning of the FC layer.
//
// Three passes over the 192 input indices, one index (10 weights) per cycle:
//   ACC   For every stored training sample, after its error is known: the
//         gradient of weight (i, o) is err[o] * act[i]; it is added to the
//         16-bit accumulator of the gradient memory and clamped ("MAC &
//         clamp"). Units: Q0.7 x Q3.4 = 2^-11.
//   UPD   After the batch: every accumulated gradient g is compared with
//         the threshold. If |g| >= thr the weight is updated,
//         w <- clamp(w - round(g * 2^-(4 + lr_shift))), i.e. the gradient
//         times the learning rate 2^-lr_shift expressed in weight LSBs
//         (2^-7), and the accumulator is reset; otherwise it is skipped and
//         keeps accumulating in the next epoch. This is the hardware form of
//         small gradient accumulation: with thr = 2^-8 / LR the updates
//         that survive are at least half a weight LSB.
//   CLR   Zero the whole gradient memory (start of training).
// Interface and timing: acc_* is a stream of activations (valid, idx, data)
// with err[] held; each beat reads the gradient word and writes it back one
// cycle later. upd_start / clr_start run a pass of 192 (+1) cycles and
// pulse done. n_updates counts the weights changed in the last UPD pass.
// The comparison on the magnitude, the rounding and the units are this
// design's choices; the flow (MAC & clamp, threshold compare, reset, skip,
// LR shift, subtract, clamp) follows the training block diagram.
module sga_module
  import kws_pkg::*;
#(
  parameter int unsigned N_IN  = FEAT_CH,
  parameter int unsigned N_OUT = N_CLASSES,
  localparam int unsigned IW   = $clog2(N_IN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  grad_t                 thr,
  input  logic [3:0]            lr_shift,
  // ACC stream
  input  logic                  acc_valid,
  input  logic [IW-1:0]         acc_idx,
  input  act_t                  acc_data,
  input  err_t                  err [N_OUT],
  // passes
  input  logic                  upd_start,
  input  logic                  clr_start,
  output logic                  busy,
  output logic                  done,
  output logic [15:0]           n_updates,
  // gradient memory
  output logic                  g_re,
  output logic [IW-1:0]         g_raddr,
  input  logic [16*N_OUT-1:0]   g_rdata,
  output logic                  g_we,
  output logic [IW-1:0]         g_waddr,
  output logic [16*N_OUT-1:0]   g_wdata,
  // FC weight memory
  output logic                  w_re,
  output logic [IW-1:0]         w_raddr,
  input  logic [8*N_OUT-1:0]    w_rdata,
  output logic                  w_we,
  output logic [IW-1:0]         w_waddr,
  output logic [8*N_OUT-1:0]    w_wdata
);

  typedef enum logic [1:0] {G_IDLE, G_UPD, G_CLR} state_e;
  state_e state;

  logic [IW-1:0] pidx;        // pass index
  logic          rd_v;        // read issued last cycle (ACC or UPD)
  logic          rd_upd;
  logic [IW-1:0] rd_idx;
  act_t          rd_act;
  logic          last_rd;
  logic [3:0]    n_chg;

  assign busy = (state != G_IDLE) || rd_v;

  assign g_re    = (state == G_UPD) || acc_valid;
  assign g_raddr = (state == G_UPD) ? pidx : acc_idx;
  assign w_re    = (state == G_UPD);
  assign w_raddr = pidx;

  // write-back datapath
  always_comb begin
    logic signed [17:0] s;
    logic signed [15:0] g;
    logic signed [16:0] mag;
    logic signed [16:0] dw;
    logic signed [9:0]  nw;
    s = '0; g = '0; mag = '0; dw = '0; nw = '0;
    g_we    = 1'b0;
    g_waddr = rd_idx;
    g_wdata = '0;
    w_we    = 1'b0;
    w_waddr = rd_idx;
    w_wdata = w_rdata;
    n_chg   = '0;
    if (state == G_CLR) begin
      g_we    = 1'b1;
      g_waddr = pidx;
    end else if (rd_v && !rd_upd) begin          // MAC & clamp
      g_we = 1'b1;
      for (int o = 0; o < N_OUT; o++) begin
        s = 18'($signed(g_rdata[16*o +: 16])) + 18'(err[o] * rd_act);
        if (s > 32767)       s = 18'sd32767;
        else if (s < -32768) s = -18'sd32768;
        g_wdata[16*o +: 16] = s[15:0];
      end
    end else if (rd_v && rd_upd) begin           // threshold, update, reset
      g_we = 1'b1;
      w_we = 1'b1;
      for (int o = 0; o < N_OUT; o++) begin
        g   = $signed(g_rdata[16*o +: 16]);
        mag = (g < 0) ? -17'(g) : 17'(g);
        g_wdata[16*o +: 16] = g;
        if (mag >= 17'(thr)) begin
          dw = (17'(g) + (17'sd1 <<< (lr_shift + 4'd3))) >>> (lr_shift + 4'd4);
          nw = 10'($signed(w_rdata[8*o +: 8])) - 10'(dw);
          if (nw > 127)       nw = 10'sd127;
          else if (nw < -128) nw = -10'sd128;
          w_wdata[8*o +: 8]   = nw[7:0];
          g_wdata[16*o +: 16] = '0;
          if (nw[7:0] != w_rdata[8*o +: 8]) n_chg = n_chg + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE; pidx <= '0; rd_v <= 1'b0; rd_upd <= 1'b0;
      rd_idx <= '0; rd_act <= '0; last_rd <= 1'b0; done <= 1'b0;
      n_updates <= '0;
    end else begin
      done    <= 1'b0;
      rd_v    <= (state == G_UPD) || (state == G_IDLE && acc_valid);
      rd_upd  <= (state == G_UPD);
      rd_idx  <= g_raddr;
      rd_act  <= acc_data;
      last_rd <= (state == G_UPD) && (int'(pidx) == N_IN - 1);
      if (rd_v && rd_upd) n_updates <= n_updates + 16'(n_chg);
      case (state)
        G_IDLE: begin
          pidx <= '0;
          if (upd_start) begin state <= G_UPD; n_updates <= '0; end
          else if (clr_start) state <= G_CLR;
        end
        G_UPD: begin
          if (int'(pidx) == N_IN - 1) state <= G_IDLE;
          pidx <= pidx + 1'b1;
        end
        default: begin
          if (int'(pidx) == N_IN - 1) begin state <= G_IDLE; done <= 1'b1; end
          pidx <= pidx + 1'b1;
        end
      endcase
      if (last_rd) done <= 1'b1;
    end
  end

  a_acc_idle: assert property (@(posedge clk) disable iff (!rst_n)
    acc_valid |-> (state == G_IDLE));

endmodule
