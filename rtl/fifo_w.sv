// fifo_w: small synchronous FIFO used as a router input buffer.
//
// DEPTH entries of W bits, first-word-fall-through: rdata shows the oldest entry
// whenever empty is low. push and pop may happen in the same cycle. free is the
// number of empty slots at the start of the cycle, which upstream logic uses for
// credit checks. Pushing into a full FIFO or popping an empty one is an error,
// caught by the assertions.
module fifo_w #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         empty,
  output logic [AW:0]  free
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;

  assign empty = (cnt == 0);
  assign free  = (AW+1)'(DEPTH) - cnt;
  assign rdata = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rp <= '0; wp <= '0; cnt <= '0; end
    else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
  always_ff @(posedge clk) if (push) mem[wp] <= wdata;

  assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && cnt == (AW+1)'(DEPTH)));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
