// sync_fifo: small synchronous FIFO used as a bus-channel buffer.
//
// DEPTH entries of type-less W-bit words; push and pop may happen in the
// same cycle. `count` tells a producer how much room is left so that it can
// hold back (stall) before the FIFO fills; pushing into a full FIFO is an
// error and is flagged by an assertion.
//
// This block is this design's own: the paper names bus channels but not
// their buffering.
//
// Lint note: rst_n is also read by the assertion's disable clause, which
// lint reports as a synchronous use.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rp, wp;

  assign empty = (count == 0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= din;
        wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop && !empty);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  push && !(pop && !empty) |-> 32'(count) < DEPTH);
endmodule
