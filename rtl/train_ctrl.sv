// train_ctrl: sequencer of the on-chip fine-tuning of the classifier.
//
// Before training, the GAP features (192 x 8 bits) and labels of the
// personal utterances are stored in the feature memory, so the
// convolution layers run only once per utterance. Training then repeats,
// for n_epochs epochs:
//   for every stored sample s:
//     FWD  stream its 192 features from the feature memory into the FC
//          layer (last-layer inference) and wait for the logits;
//     CE   run the cross-entropy error unit, then update the FC biases
//          with the scaled error;
//     GRD  stream the same features again into the SGA module, which
//          accumulates error x feature into the gradient memory;
//   UPD    after the last sample, one SGA pass applies the gradients that
//          passed the threshold and resets them.
// The gradient memory is cleared once at the start (CLR).
//
// Interface and timing: start (with n_samples >= 1 and n_epochs >= 1
// stable) runs the whole flow; busy is high and done pulses at the end.
// Per sample it takes about 192 + 2 (FWD) + 101 (CE) + 192 + 2 (GRD)
// cycles, per epoch another 193 for UPD. The stream port (st_*) carries
// the memory data one cycle after the read, with st_to_fc selecting the
// consumer. The order of the steps follows the paper's training flow;
// memory layout (sample s at addresses s*192 .. s*192+191) and the
// handshakes are this design's.
module train_ctrl
  import kws_pkg::*;
#(
  parameter int unsigned MAX_BATCH = 90,
  parameter int unsigned N_IN      = FEAT_CH,
  localparam int unsigned SW       = $clog2(MAX_BATCH + 1),
  localparam int unsigned FAW      = $clog2(MAX_BATCH * N_IN),
  localparam int unsigned IW       = $clog2(N_IN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [SW-1:0]  n_samples,
  input  logic [9:0]     n_epochs,
  output logic           busy,
  output logic           done,
  output logic [9:0]     epoch,
  output logic [SW-1:0]  sample,
  // feature memory read port
  output logic           fm_re,
  output logic [FAW-1:0] fm_raddr,
  input  act_t           fm_rdata,
  // feature stream to FC (st_to_fc) or SGA
  output logic           st_valid,
  output logic [IW-1:0]  st_idx,
  output act_t           st_data,
  output logic           st_last,
  output logic           st_to_fc,
  // handshakes with the training units
  input  logic           fc_done,
  output logic           ce_start,
  input  logic           ce_done,
  output logic           bias_upd,
  output logic           sga_clr_start,
  output logic           sga_upd_start,
  input  logic           sga_done,
  input  logic           sga_busy
);

  typedef enum logic [3:0] {
    T_IDLE, T_CLR, T_FWD, T_FWD_WAIT, T_CE, T_GRD, T_GRD_WAIT, T_UPD
  } state_e;
  state_e state;

  logic [IW-1:0] i;
  logic          rd_v, rd_fc;
  logic [IW-1:0] rd_i;
  logic          issuing;

  assign busy     = (state != T_IDLE);
  assign issuing  = (state == T_FWD) || (state == T_GRD);
  assign fm_re    = issuing;
  assign fm_raddr = FAW'(int'(sample) * N_IN + int'(i));

  assign st_valid = rd_v;
  assign st_idx   = rd_i;
  assign st_data  = fm_rdata;
  assign st_last  = rd_v && (int'(rd_i) == N_IN - 1);
  assign st_to_fc = rd_fc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; i <= '0; rd_v <= 1'b0; rd_fc <= 1'b0; rd_i <= '0;
      epoch <= '0; sample <= '0; done <= 1'b0; ce_start <= 1'b0;
      bias_upd <= 1'b0; sga_clr_start <= 1'b0; sga_upd_start <= 1'b0;
    end else begin
      done <= 1'b0; ce_start <= 1'b0; bias_upd <= 1'b0;
      sga_clr_start <= 1'b0; sga_upd_start <= 1'b0;
      rd_v  <= issuing;
      rd_fc <= (state == T_FWD);
      rd_i  <= i;
      case (state)
        T_IDLE: if (start) begin
          epoch <= '0; sample <= '0; i <= '0;
          sga_clr_start <= 1'b1;
          state <= T_CLR;
        end
        T_CLR: if (sga_done) state <= T_FWD;
        T_FWD: begin
          i <= i + 1'b1;
          if (int'(i) == N_IN - 1) begin i <= '0; state <= T_FWD_WAIT; end
        end
        T_FWD_WAIT: if (fc_done) begin ce_start <= 1'b1; state <= T_CE; end
        T_CE: if (ce_done) begin bias_upd <= 1'b1; state <= T_GRD; end
        T_GRD: begin
          i <= i + 1'b1;
          if (int'(i) == N_IN - 1) begin i <= '0; state <= T_GRD_WAIT; end
        end
        T_GRD_WAIT: if (!rd_v && !sga_busy) begin
          if (sample == n_samples - 1'b1) begin
            sga_upd_start <= 1'b1;
            state <= T_UPD;
          end else begin
            sample <= sample + 1'b1;
            state  <= T_FWD;
          end
        end
        default: if (sga_done) begin            // T_UPD
          sample <= '0;
          if (epoch == n_epochs - 1'b1) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end else begin
            epoch <= epoch + 1'b1;
            state <= T_FWD;
          end
        end
      endcase
    end
  end

endmodule
