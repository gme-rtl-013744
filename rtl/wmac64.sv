// wmac64: pipelined 64-bit integer multiply-accumulate (the WMAC unit).
//
// Computes p = a * b + c with 64-bit operands and a 128-bit addend and result,
// natively, instead of emulating it with several 32-bit instructions. A new
// operation may enter every cycle; its result appears STAGES cycles later with
// out_valid. The product is formed in the first stage and carried through the
// remaining STAGES-1 registers, which a synthesis tool with retiming spreads
// over the multiplier array. The pipelined 64-bit multiply-accumulate follows
// the WMAC description; the depth (6) is this design's choice, picked so that a
// modular multiplication takes the 23 cycles listed for MOD+WMAC.
module wmac64 #(
  parameter int unsigned W      = 64,
  parameter int unsigned STAGES = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic [2*W-1:0] c,
  output logic           out_valid,
  output logic [2*W-1:0] p
);
  logic [2*W-1:0] pipe_d [STAGES];
  logic           pipe_v [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < STAGES; i++) pipe_v[i] <= 1'b0;
    end else begin
      pipe_v[0] <= in_valid;
      for (int i = 1; i < STAGES; i++) pipe_v[i] <= pipe_v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    pipe_d[0] <= (2*W)'(a) * (2*W)'(b) + c;
    for (int i = 1; i < STAGES; i++) pipe_d[i] <= pipe_d[i-1];
  end

  assign out_valid = pipe_v[STAGES-1];
  assign p         = pipe_d[STAGES-1];

  initial assert (STAGES >= 1) else $error("wmac64: STAGES must be at least 1");
endmodule
