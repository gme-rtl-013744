// simd_unit: a SIMD16 vector unit with MOD/WMAC lanes and its register file.
//
// A wavefront of WAVE (64) threads runs on LANES (16) lanes in WAVE/LANES (4)
// passes: on each of four consecutive cycles one group of 16 threads reads its
// operands from the vector register file and enters the mod_lane pipelines; the
// groups leave in the same order and are written back to vd. The unit holds one
// instruction at a time: in_ready is low from acceptance until the last group
// has been written, and done pulses in the cycle after that write. Measured from
// the accepting clock edge to the last write-back edge, an instruction takes
// 4 + (lane latency) cycles: mod-add 7, mod-red 17, mod-mul 23 (the MOD+WMAC
// cycle counts), mul_lo/mac 10. The 16-lane/64-thread/4-cycle organisation is
// that of the GPU. NUM_VREGS = 64 registers of 64 threads x 64 bits (32 KB per
// SIMD) is the 15 MB GPU register file divided over 120 CUs x 4 SIMDs;
// one-at-a-time issue is this design's choice.
// The aux ports give the CU's LDS unit per-thread access to the registers while
// the unit is idle: one combinational read port and two write ports (write
// port 1 wins if both name the same element).
module simd_unit
  import gme_pkg::*;
#(
  parameter int unsigned NUM_VREGS   = 64,
  parameter int unsigned ADD_STAGES  = 3,
  parameter int unsigned WMAC_STAGES = 6,
  parameter int unsigned RED_STAGES  = 13
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction
  input  logic              in_valid,
  output logic              in_ready,
  input  vinstr_t           instr,
  output logic              done,
  // per-thread access for the LDS unit
  input  logic [VREG_W-1:0] aux_rreg,
  input  logic [5:0]        aux_rthr,
  output logic [WORD-1:0]   aux_rdata,
  input  logic [1:0]        aux_we,
  input  logic [VREG_W-1:0] aux_wreg [2],
  input  logic [5:0]        aux_wthr [2],
  input  logic [WORD-1:0]   aux_wdata [2]
);
  localparam int unsigned GROUPS = WAVE / LANES;

  logic [WORD-1:0] vrf [NUM_VREGS][WAVE];

  vinstr_t         cur;
  logic            busy;
  logic            issuing;
  logic [1:0]      iss_g, wb_g;
  logic [LANES-1:0] l_valid;
  logic [WORD-1:0] l_r [LANES];

  assign in_ready  = !busy;
  assign aux_rdata = vrf[aux_rreg][aux_rthr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; issuing <= 1'b0; iss_g <= '0; wb_g <= '0; done <= 1'b0;
      cur <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid && in_ready) begin
        cur <= instr; busy <= 1'b1; issuing <= 1'b1; iss_g <= '0; wb_g <= '0;
      end
      if (issuing) begin
        iss_g <= iss_g + 2'd1;
        if (iss_g == 2'(GROUPS-1)) issuing <= 1'b0;
      end
      if (l_valid[0]) begin
        wb_g <= wb_g + 2'd1;
        if (wb_g == 2'(GROUPS-1)) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end

  // register file writes: lane results, then the aux ports
  always_ff @(posedge clk) begin
    if (l_valid[0])
      for (int l = 0; l < LANES; l++) vrf[cur.vd][wb_g*LANES + l] <= l_r[l];
    for (int p = 0; p < 2; p++)
      if (aux_we[p]) vrf[aux_wreg[p]][aux_wthr[p]] <= aux_wdata[p];
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mod_lane #(.ADD_STAGES(ADD_STAGES), .WMAC_STAGES(WMAC_STAGES), .RED_STAGES(RED_STAGES)) u_lane (
      .clk, .rst_n,
      .in_valid (issuing),
      .op       (cur.op),
      .a        (vrf[cur.vs0][iss_g*LANES + l]),
      .b        (vrf[cur.vs1][iss_g*LANES + l]),
      .c        (vrf[cur.vd ][iss_g*LANES + l]),
      .q        (cur.q),
      .mu       (cur.mu),
      .out_valid(l_valid[l]),
      .r        (l_r[l])
    );
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_ready |-> instr.op inside {OP_MOD_RED, OP_MOD_ADD, OP_MOD_MUL, OP_MUL_LO, OP_MAC});
  initial assert (WAVE == GROUPS * LANES && GROUPS == 4) else $error("simd_unit: expects 4 passes");
endmodule
