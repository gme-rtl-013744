// mod_lane: one vector-ALU lane carrying the MOD and WMAC extensions.
//
// Executes, per thread:
//   OP_MOD_RED  r = a mod q                 (Barrett, RED_STAGES cycles)
//   OP_MOD_ADD  r = (a + b) mod q           (add, one conditional subtract, ADD_STAGES)
//   OP_MOD_MUL  r = (a * b) mod q           (WMAC product then Barrett, WMAC+RED stages)
//   OP_MUL_LO   r = low 64 bits of a * b    (WMAC, WMAC_STAGES)
//   OP_MAC      r = c + a * b, low 64 bits  (WMAC, WMAC_STAGES)
// The modular instructions and their meaning follow the MOD ISA extension
// (mod-red, mod-add, mod-mult); mod-add assumes reduced operands, as modular
// addition by conditional subtraction does. The integer ops stand for the
// native 64-bit WMAC instructions, whose encodings are this design's own.
// Interface: a valid-qualified operation enters every cycle it is offered; the
// result leaves with out_valid after the latency of its op. q and mu (scalar
// operands of the instruction) must stay stable while a mod-mul is inside the
// WMAC part. Ops of different latency may only be mixed if their results do not
// leave in the same cycle; the SIMD issues one instruction at a time, and an
// assertion checks this.
module mod_lane
  import gme_pkg::*;
#(
  parameter int unsigned K           = QBITS,
  parameter int unsigned ADD_STAGES  = 3,
  parameter int unsigned WMAC_STAGES = 6,
  parameter int unsigned RED_STAGES  = 13
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  op_e             op,
  input  logic [WORD-1:0] a,
  input  logic [WORD-1:0] b,
  input  logic [WORD-1:0] c,
  input  logic [WORD-1:0] q,
  input  logic [WORD-1:0] mu,
  output logic            out_valid,
  output logic [WORD-1:0] r
);
  // ---------------- modular addition path ----------------
  logic [WORD:0]   add_sum;
  logic [WORD-1:0] add_res;
  logic [WORD-1:0] add_d [ADD_STAGES];
  logic [ADD_STAGES-1:0] add_v;
  assign add_sum = {1'b0, a} + {1'b0, b};
  assign add_res = (add_sum >= {1'b0, q}) ? WORD'(add_sum - {1'b0, q}) : add_sum[WORD-1:0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) add_v <= '0;
    else        add_v <= {add_v[ADD_STAGES-2:0], in_valid && op == OP_MOD_ADD};
  always_ff @(posedge clk) begin
    add_d[0] <= add_res;
    for (int i = 1; i < ADD_STAGES; i++) add_d[i] <= add_d[i-1];
  end

  // ---------------- WMAC path ----------------
  logic                  w_in, w_out;
  logic [2*WORD-1:0]     w_p;
  logic [WMAC_STAGES-1:0] w_is_mod;   // result continues into the reducer
  assign w_in = in_valid && (op == OP_MOD_MUL || op == OP_MUL_LO || op == OP_MAC);

  wmac64 #(.W(WORD), .STAGES(WMAC_STAGES)) u_wmac (
    .clk, .rst_n, .in_valid(w_in), .a, .b,
    .c((op == OP_MAC) ? {{WORD{1'b0}}, c} : '0),
    .out_valid(w_out), .p(w_p)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) w_is_mod <= '0;
    else        w_is_mod <= {w_is_mod[WMAC_STAGES-2:0], in_valid && op == OP_MOD_MUL};

  // ---------------- Barrett reduction path ----------------
  logic            red_in, red_out;
  logic [2*K-1:0]  red_x;
  logic [K-1:0]    red_r;
  logic            red_from_wmac;
  assign red_from_wmac = w_out && w_is_mod[WMAC_STAGES-1];
  assign red_in = red_from_wmac || (in_valid && op == OP_MOD_RED);
  assign red_x  = red_from_wmac ? w_p[2*K-1:0] : (2*K)'(a);

  barrett_reduce #(.K(K), .STAGES(RED_STAGES)) u_red (
    .clk, .rst_n, .in_valid(red_in), .x(red_x), .q(q[K-1:0]), .mu(mu[K+1:0]),
    .out_valid(red_out), .r(red_r)
  );

  // ---------------- result select ----------------
  logic int_out;
  assign int_out = w_out && !w_is_mod[WMAC_STAGES-1];
  always_comb begin
    out_valid = add_v[ADD_STAGES-1] || int_out || red_out;
    if (red_out)               r = WORD'(red_r);
    else if (int_out)          r = w_p[WORD-1:0];
    else                       r = add_d[ADD_STAGES-1];
  end

  // The SIMD never lets two results leave in one cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
    !(red_in && red_from_wmac && in_valid && op == OP_MOD_RED));
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({add_v[ADD_STAGES-1], int_out, red_out}));
  initial assert (ADD_STAGES >= 2 && WMAC_STAGES >= 2)
    else $error("mod_lane: stage counts too small");
endmodule
