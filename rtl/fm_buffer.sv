// fm_buffer: feature map buffer between two binarized layers (after layer
// 3 and after layer 5).
//
// The producing layer writes one binary feature vector per pooled position
// and the consuming layer reads them in the same order, so the buffer is a
// first-in first-out queue over a 1R1W SRAM (sram_1r1w) with one output
// register. DEPTH is sized for the whole feature map of one utterance, so
// the producer is never stalled by the consumer.
//
// Interface and timing: valid/ready on both sides. A written vector can be
// read out two cycles later at the earliest (SRAM read latency plus the
// output register); reads run at one vector every second cycle, far above
// the rate of the layers. clear empties the buffer. The paper names the
// buffers; their organisation as a FIFO is this design's choice.
module fm_buffer #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 495,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  logic [AW-1:0]   wptr, rptr;
  logic [AW:0]     cnt;
  logic            rd_pend;
  logic            we, issue;
  logic [WIDTH-1:0] rdata;

  assign in_ready = (int'(cnt) < DEPTH);
  assign we       = in_valid && in_ready && !clear;
  assign issue    = (cnt != 0) && !rd_pend && (!out_valid || out_ready) && !clear;

  sram_1r1w #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_mem (
    .clk, .we, .waddr(wptr), .wdata(in_data),
    .re(issue), .raddr(rptr), .rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      cnt       <= '0;
      rd_pend   <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clear) begin
      wptr      <= '0;
      rptr      <= '0;
      cnt       <= '0;
      rd_pend   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (we)    wptr <= (int'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (issue) rptr <= (int'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
      cnt     <= cnt + (AW+1)'(we) - (AW+1)'(issue);
      rd_pend <= issue;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd_pend) begin
        out_data  <= rdata;
        out_valid <= 1'b1;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_pend |-> (!out_valid || out_ready));

endmodule
