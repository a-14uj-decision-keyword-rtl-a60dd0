// sram_1r1w: synchronous memory with one write port and one read port,
// standing for the digital SRAM macros of the accelerator (feature memory,
// gradient memory, FC weight memory, feature map buffers).
//
// A write (we, waddr, wdata) takes effect at the clock edge. A read (re,
// raddr) returns rdata one cycle later and holds it until the next read.
// Reading an address in the cycle it is written returns the old word.
// Contents are not reset, as in a real SRAM. Organisation (word width and
// depth) is chosen per instance by this design.
module sram_1r1w #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
