// gme_top: the GME extensions of an MI100-class GPU, wired together.
//
// ROWS x COLS Shader Engines of CONC compute units (3 x 5 x 8 = 120). Every CU
// (gme_cu) has a MOD/WMAC SIMD and a 64 KB LDS. Two copies of the concentrated
// torus (cnoc_torus) join all LDSs into one global address space: one carries
// requests, the other responses, so a response can never be blocked behind a
// request. barrier_unit provides Shader-Engine and GPU-wide barriers, and
// labs_dispatcher launches FHE blocks on the CUs chosen by the LABS schedule.
// The existing GPU front end is outside: each CU's decoded vector instructions
// arrive on instr_* (one instruction at a time per CU, done pulses on
// completion), block launches leave on launch_* and block completion returns on
// blk_done. Counters per CU and in the dispatcher show how often each mechanism
// (local and remote LDS access, bank conflicts, dispatch stalls) occurred.
// Sizes follow the GME configuration; see the sub-blocks for which choices are
// this design's own.
module gme_top
  import gme_pkg::*;
#(
  parameter int unsigned ROWS        = 3,
  parameter int unsigned COLS        = 5,
  parameter int unsigned CONC        = 8,
  parameter int unsigned LDS_BYTES   = 65536,
  parameter int unsigned NUM_VREGS   = 64,
  parameter int unsigned FIFO_DEPTH  = 4,
  parameter int unsigned QDEPTH      = 16,
  parameter int unsigned MAX_BLOCKS  = 256,
  localparam int unsigned NCU        = ROWS * COLS * CONC,
  localparam int unsigned BW         = $clog2(MAX_BLOCKS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // per-CU instruction streams from the GPU front end
  input  logic [NCU-1:0]  instr_valid,
  output logic [NCU-1:0]  instr_ready,
  input  vinstr_t         instr [NCU],
  output logic [NCU-1:0]  done,
  input  logic [NCU-1:0]  bar_member,
  // LABS schedule in, launches out
  input  logic            cq_valid,
  output logic            cq_ready,
  input  logic [BW-1:0]   cq_blk,
  input  logic [CU_W-1:0] cq_cu,
  input  logic [1:0]      cq_dep_v,
  input  logic [BW-1:0]   cq_dep [2],
  output logic            launch_valid,
  output logic [CU_W-1:0] launch_cu,
  output logic [BW-1:0]   launch_blk,
  input  logic [NCU-1:0]  blk_done,
  // activity counters
  output logic [31:0]     n_local    [NCU],
  output logic [31:0]     n_remote   [NCU],
  output logic [31:0]     n_served   [NCU],
  output logic [31:0]     n_conflict [NCU],
  output logic [31:0]     n_launched,
  output logic [31:0]     n_dep_stall,
  output logic [31:0]     n_busy_stall
);
  logic [NCU-1:0] bar_arrive, bar_release;
  scope_e         bar_scope [NCU];

  logic [NCU-1:0] rq_inj_v, rq_inj_r, rq_ej_v, rq_ej_r;
  pkt_t           rq_inj_p [NCU], rq_ej_p [NCU];
  logic [NCU-1:0] rs_inj_v, rs_inj_r, rs_ej_v;
  pkt_t           rs_inj_p [NCU], rs_ej_p [NCU];

  for (genvar i = 0; i < NCU; i++) begin : g_cu
    gme_cu #(.CU_ID(i), .NUM_CU(NCU), .LDS_BYTES(LDS_BYTES), .NUM_VREGS(NUM_VREGS)) u_cu (
      .clk, .rst_n,
      .instr_valid(instr_valid[i]), .instr_ready(instr_ready[i]), .instr(instr[i]), .done(done[i]),
      .bar_arrive(bar_arrive[i]), .bar_scope(bar_scope[i]), .bar_release(bar_release[i]),
      .req_out_valid(rq_inj_v[i]), .req_out_pkt(rq_inj_p[i]), .req_out_ready(rq_inj_r[i]),
      .req_in_valid(rq_ej_v[i]), .req_in_pkt(rq_ej_p[i]), .req_in_ready(rq_ej_r[i]),
      .rsp_out_valid(rs_inj_v[i]), .rsp_out_pkt(rs_inj_p[i]), .rsp_out_ready(rs_inj_r[i]),
      .rsp_in_valid(rs_ej_v[i]), .rsp_in_pkt(rs_ej_p[i]),
      .n_local(n_local[i]), .n_remote(n_remote[i]), .n_served(n_served[i]),
      .n_conflict(n_conflict[i])
    );
  end

  cnoc_torus #(.ROWS(ROWS), .COLS(COLS), .CONC(CONC), .FIFO_DEPTH(FIFO_DEPTH)) u_req_net (
    .clk, .rst_n,
    .inj_valid(rq_inj_v), .inj_pkt(rq_inj_p), .inj_ready(rq_inj_r),
    .ej_valid(rq_ej_v), .ej_pkt(rq_ej_p), .ej_ready(rq_ej_r)
  );

  cnoc_torus #(.ROWS(ROWS), .COLS(COLS), .CONC(CONC), .FIFO_DEPTH(FIFO_DEPTH)) u_rsp_net (
    .clk, .rst_n,
    .inj_valid(rs_inj_v), .inj_pkt(rs_inj_p), .inj_ready(rs_inj_r),
    .ej_valid(rs_ej_v), .ej_pkt(rs_ej_p), .ej_ready({NCU{1'b1}})
  );

  barrier_unit #(.NUM_CU(NCU), .CONC(CONC)) u_barrier (
    .clk, .rst_n, .member(bar_member), .arrive(bar_arrive), .scope(bar_scope),
    .release_o(bar_release)
  );

  labs_dispatcher #(.NUM_CU(NCU), .QDEPTH(QDEPTH), .MAX_BLOCKS(MAX_BLOCKS)) u_labs (
    .clk, .rst_n,
    .cq_valid, .cq_ready, .cq_blk, .cq_cu, .cq_dep_v, .cq_dep,
    .launch_valid, .launch_cu, .launch_blk, .blk_done,
    .n_launched, .n_dep_stall, .n_busy_stall
  );

  initial assert (NCU <= 128) else $error("gme_top: at most 128 CUs fit the packet format");
endmodule
