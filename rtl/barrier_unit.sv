// barrier_unit: synchronisation barriers across compute units, two granularities.
//
// A CU that reaches a barrier pulses arrive with its scope: SCOPE_SE (the CUs of
// its own Shader Engine) or SCOPE_GLOBAL (all CUs). Only CUs whose member bit is
// set take part. A Shader Engine barrier completes once every member CU of
// that Shader Engine has arrived with SE scope; the global barrier completes
// once every member CU of the GPU has arrived with global scope. On completion
// the waiting CUs get a one-cycle release pulse in the next cycle and their
// arrival flags clear, so the barrier can be reused. Barriers of several
// granularities are part of the cNoC description, which only names them; the
// scopes, the member mask and the pulse protocol are this design's choices.
module barrier_unit
  import gme_pkg::*;
#(
  parameter int unsigned NUM_CU = 120,
  parameter int unsigned CONC   = 8,
  localparam int unsigned NSE   = NUM_CU / CONC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_CU-1:0] member,
  input  logic [NUM_CU-1:0] arrive,
  input  scope_e            scope [NUM_CU],
  output logic [NUM_CU-1:0] release_o
);
  logic [NUM_CU-1:0] arr_se, arr_gl, nxt_se, nxt_gl;
  logic [NSE-1:0]    se_done;
  logic              gl_done;

  always_comb begin
    for (int i = 0; i < NUM_CU; i++) begin
      nxt_se[i] = arr_se[i] || (arrive[i] && scope[i] == SCOPE_SE);
      nxt_gl[i] = arr_gl[i] || (arrive[i] && scope[i] == SCOPE_GLOBAL);
    end
    gl_done = |(nxt_gl & member);
    for (int i = 0; i < NUM_CU; i++) if (member[i] && !nxt_gl[i]) gl_done = 1'b0;
    for (int s = 0; s < NSE; s++) begin
      se_done[s] = |(nxt_se[s*CONC +: CONC] & member[s*CONC +: CONC]);
      for (int k = 0; k < CONC; k++)
        if (member[s*CONC+k] && !nxt_se[s*CONC+k]) se_done[s] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_se <= '0; arr_gl <= '0; release_o <= '0;
    end else begin
      release_o <= '0;
      arr_gl    <= gl_done ? '0 : nxt_gl;
      if (gl_done) release_o <= nxt_gl & member;
      for (int s = 0; s < NSE; s++) begin
        arr_se[s*CONC +: CONC] <= se_done[s] ? '0 : nxt_se[s*CONC +: CONC];
        if (se_done[s]) release_o[s*CONC +: CONC] <= nxt_se[s*CONC +: CONC] & member[s*CONC +: CONC];
      end
    end
  end

  initial assert (NUM_CU % CONC == 0) else $error("barrier_unit: NUM_CU must be a multiple of CONC");
endmodule
