// test_reg: test-mode input/output register for checking the IMC macros.
//
// In test mode a known input pattern is applied to one macro step of a
// chosen layer and the raw sense-amplifier bits are read back, so the
// effect of MAV offset and SA variation of every macro can be measured
// against the expected result. This register is the chip-side end of that
// path: a 192-bit pattern register loaded serially (one bit per cycle on
// si while shift is high, first bit ends up in bit 0 after 192 shifts,
// i.e. the pattern is sent LSB first) and an 8-bit result register that
// captures the macro output (res_load) and is shifted out on so, LSB
// first, during the same shift cycles.
// The paper names the register and its purpose; the serial interface is
// this design's choice.
module test_reg #(
  parameter int unsigned PAT_W = 192,
  parameter int unsigned RES_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift,
  input  logic             si,
  output logic             so,
  output logic [PAT_W-1:0] pattern,
  input  logic             res_load,
  input  logic [RES_W-1:0] res_in
);

  logic [RES_W-1:0] res;

  assign so = res[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pattern <= '0;
      res     <= '0;
    end else begin
      if (shift) pattern <= {si, pattern[PAT_W-1:1]};
      if (res_load)   res <= res_in;
      else if (shift) res <= {1'b0, res[RES_W-1:1]};
    end
  end

endmodule
