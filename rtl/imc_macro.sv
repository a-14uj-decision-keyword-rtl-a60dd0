// imc_macro: behavioural model of one in-SRAM-computing macro (the "UCE").
//
// The real macro is analog: 8 banks of 64x64 8T SRAM cells. For a compute
// the read bitlines of a bank are precharged from the 64 binary inputs, one
// wordline of weights is read, each cell keeps or discharges its bitline,
// and the results are averaged by charge sharing on two lines AVG_P/AVG_N
// by sign; a sense amplifier (SA) turns their difference into one bit.
// Each bank therefore produces one binary output per operation, eight per
// macro. This model replaces the charge sharing by an exact signed count:
// a column adds +1 when input and weight bits agree (XNOR) and -1 when
// they differ. The batch-norm bias lives in a wordline of its own that is
// read with all inputs at 1, so it adds sum(W_i) (an even number in
// [-64, 64]).
//
// Own choices (the macro's internal sequencing is not published with the
// accelerator): a dot product longer than 64 inputs is built from several
// consecutive wordline reads whose partial sums accumulate on the AVG lines
// (cmp_first starts, cmp_last fires the SA); all banks read the same row
// with the same inputs. The SA decides 1 when AVG_P >= AVG_N. MAV_OFFSET
// adds a fixed per-bank offset to stand for MAV mismatch and SA variation
// (zero = ideal macro).
//
// Interface and timing: one write or one compute per clock. sa_out is
// registered and valid (sa_valid) in the cycle after the cmp_last read.
// This is a behavioural model of an analog macro; the storage array is
// ordinary logic.
module imc_macro #(
  parameter int unsigned N_BANKS = 8,
  parameter int unsigned ROWS    = 64,
  parameter int unsigned COLS    = 64,
  parameter int MAV_OFFSET [N_BANKS] = '{default: 0}
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // weight / BN-row write
  input  logic                       wr_en,
  input  logic [$clog2(N_BANKS)-1:0] wr_bank,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [COLS-1:0]            wr_data,
  // compute: one wordline read per cycle
  input  logic                       cmp_en,
  input  logic                       cmp_first,
  input  logic                       cmp_last,
  input  logic [$clog2(ROWS)-1:0]    cmp_row,
  input  logic [COLS-1:0]            rbl_in,
  // sense amplifier outputs
  output logic [N_BANKS-1:0]         sa_out,
  output logic                       sa_valid
);

  localparam int unsigned AW = $clog2(COLS * 8) + 2;

  logic [COLS-1:0]        cells [N_BANKS][ROWS];
  logic signed [AW-1:0]   avg   [N_BANKS];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_bank][wr_row] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_out   <= '0;
      sa_valid <= 1'b0;
      for (int b = 0; b < N_BANKS; b++) avg[b] <= '0;
    end else begin
      sa_valid <= 1'b0;
      if (cmp_en) begin
        for (int b = 0; b < N_BANKS; b++) begin
          logic signed [AW-1:0] part, tot;
          part = AW'(2 * $countones(~(rbl_in ^ cells[b][cmp_row]))) - AW'(COLS);
          tot  = (cmp_first ? AW'(0) : avg[b]) + part;
          avg[b] <= tot;
          if (cmp_last) sa_out[b] <= (tot + AW'(MAV_OFFSET[b])) >= 0;
        end
        sa_valid <= cmp_last;
      end
    end
  end

endmodule
