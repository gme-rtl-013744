// barrett_reduce: pipelined Barrett modular reduction with one correction step.
//
// Reduces x < 2^(2K) modulo a K-bit prime q (2^(K-1) < q < 2^K) using the
// precomputed constant mu = floor(2^(2K) / q), which is supplied with the
// modulus because the primes are compile-time constants. The quotient estimate
// qh = floor(x * mu / 2^(2K)) is at most one below floor(x / q), so the
// remainder r = x - qh * q lies in [0, 2q) and a single compare-and-subtract
// finishes the reduction: one comparison per reduction, which is the property
// the MOD unit relies on to avoid branch divergence.
//   stage 1: qh = (x * mu) >> 2K      stage 2: r = x - qh * q (K+2 bits)
//   stage 3: r >= q ? r - q : r       stages 4..STAGES: registers only
// A new value may enter every cycle; the result leaves STAGES cycles later.
// STAGES = 13 makes mod-red take 17 cycles per wavefront in the SIMD (4 issue
// cycles + 13), the MOD+WMAC figure; the exact arithmetic is this design's own.
module barrett_reduce #(
  parameter int unsigned K      = 54,
  parameter int unsigned STAGES = 13
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [2*K-1:0] x,
  input  logic [K-1:0]   q,
  input  logic [K+1:0]   mu,
  output logic           out_valid,
  output logic [K-1:0]   r
);
  localparam int unsigned PW = 3*K + 2;   // width of x * mu

  logic [STAGES-1:0] v;
  // stage 1
  logic [2*K-1:0] x1;
  logic [K-1:0]   q1;
  logic [K+1:0]   qh1;
  // stage 2
  logic [K+1:0]   r2;
  logic [K-1:0]   q2;
  // stage 3 and later
  logic [K-1:0]   rr [2:STAGES-1];

  logic [PW-1:0]  prod;
  logic [K+1:0]   qq_lo;  // low bits of qh * q are enough: r < 2q < 2^(K+1)
  assign prod  = PW'(x) * PW'(mu);
  assign qq_lo = (K+2)'(qh1 * q1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[STAGES-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    x1  <= x;
    q1  <= q;
    qh1 <= prod[PW-1 -: K+2];
    r2  <= x1[K+1:0] - qq_lo;
    q2  <= q1;
    rr[2] <= (r2 >= (K+2)'(q2)) ? K'(r2 - (K+2)'(q2)) : K'(r2);
    for (int i = 3; i < STAGES; i++) rr[i] <= rr[i-1];
  end

  assign out_valid = v[STAGES-1];
  assign r         = rr[STAGES-1];

  initial assert (STAGES >= 3) else $error("barrett_reduce: STAGES must be at least 3");
endmodule
