// gme_cu: the GME extensions of one compute unit.
//
// Holds the parts a GME compute unit adds or changes: a SIMD16 unit whose
// lanes carry the MOD and WMAC extensions (simd_unit), the CU's 64 KB LDS
// (lds_bank_mem), and the LDS unit that makes all LDSs one global address
// space over the CU-side network. It takes one decoded vector instruction at a
// time from the CU's issue stage (instr_valid/instr_ready) and pulses done
// when the instruction has fully completed:
//   mod-red/mod-add/mod-mult/mul_lo/mac  run on the SIMD (7..23 cycles)
//   ds_read / ds_write  thread t (0..63) reads vd[t] from / writes v0[t] to
//       global word address base + t. gas_map names the owning CU: accesses
//       to the own LDS go to its local port (one per cycle); others become a
//       request packet on the request network, and the matching response
//       (read data, or an acknowledgement for a write) comes back on the
//       response network. The instruction completes when every access has.
//   barrier  pulses bar_arrive with the scope and waits for bar_release.
// Requests from other CUs arrive on req_in (one-entry buffer, ready = buffer
// empty), are served on the LDS's remote port, which waits when the local port
// uses the same bank, and are answered on rsp_out. rsp_in is always accepted.
// Counters report local and remote accesses issued, remote requests served and
// cycles a remote request lost a bank conflict. Fetch, wavefront scheduling,
// the scalar unit and the caches of the CU are not part of this block. One of
// the CU's four SIMDs is modelled. The shared-LDS idea, the MOD/WMAC
// instructions and the LDS size come from GME; the instruction sequencing,
// packet protocol and one-instruction-at-a-time issue are this design's own.
module gme_cu
  import gme_pkg::*;
#(
  parameter int unsigned CU_ID       = 0,
  parameter int unsigned NUM_CU      = 120,
  parameter int unsigned LDS_BYTES   = 65536,
  parameter int unsigned NUM_VREGS   = 64,
  parameter int unsigned ADD_STAGES  = 3,
  parameter int unsigned WMAC_STAGES = 6,
  parameter int unsigned RED_STAGES  = 13
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction from the CU issue stage
  input  logic        instr_valid,
  output logic        instr_ready,
  input  vinstr_t     instr,
  output logic        done,
  // barrier
  output logic        bar_arrive,
  output scope_e      bar_scope,
  input  logic        bar_release,
  // request network
  output logic        req_out_valid,
  output pkt_t        req_out_pkt,
  input  logic        req_out_ready,
  input  logic        req_in_valid,
  input  pkt_t        req_in_pkt,
  output logic        req_in_ready,
  // response network
  output logic        rsp_out_valid,
  output pkt_t        rsp_out_pkt,
  input  logic        rsp_out_ready,
  input  logic        rsp_in_valid,
  input  pkt_t        rsp_in_pkt,
  // activity counters
  output logic [31:0] n_local,
  output logic [31:0] n_remote,
  output logic [31:0] n_served,
  output logic [31:0] n_conflict
);
  localparam int unsigned LDS_WORDS = LDS_BYTES / 8;
  localparam int unsigned LW        = $clog2(LDS_WORDS);

  typedef enum logic [2:0] {S_IDLE, S_VALU, S_DS, S_DRAIN, S_BAR} state_e;
  state_e  state;
  vinstr_t cur;
  logic [6:0] t;           // thread being issued (64 = all issued)
  logic [6:0] outstanding; // remote accesses awaiting a response

  // ---------------- SIMD ----------------
  logic              simd_valid, simd_ready, simd_done;
  logic [WORD-1:0]   aux_rdata;
  logic [1:0]        aux_we;
  logic [VREG_W-1:0] aux_wreg [2];
  logic [5:0]        aux_wthr [2];
  logic [WORD-1:0]   aux_wdata [2];
  logic              is_valu;

  assign is_valu    = instr.op inside {OP_MOD_RED, OP_MOD_ADD, OP_MOD_MUL, OP_MUL_LO, OP_MAC};
  assign simd_valid = instr_valid && state == S_IDLE && is_valu;

  simd_unit #(.NUM_VREGS(NUM_VREGS), .ADD_STAGES(ADD_STAGES), .WMAC_STAGES(WMAC_STAGES),
              .RED_STAGES(RED_STAGES)) u_simd (
    .clk, .rst_n, .in_valid(simd_valid), .in_ready(simd_ready), .instr, .done(simd_done),
    .aux_rreg(cur.vs0), .aux_rthr(t[5:0]), .aux_rdata,
    .aux_we, .aux_wreg, .aux_wthr, .aux_wdata
  );

  // ---------------- address translation ----------------
  logic [CU_W-1:0] dcu;
  logic [LW-1:0]   dladdr;
  logic            is_local;
  gas_map #(.NUM_CU(NUM_CU), .LDS_WORDS(LDS_WORDS), .GADDR_W(GADDR_W)) u_map (
    .gaddr(cur.base + GADDR_W'(t[5:0])), .cu(dcu), .laddr(dladdr)
  );
  assign is_local = (dcu == CU_W'(CU_ID));

  // ---------------- LDS ----------------
  logic          l_req, l_rvalid;
  logic [WORD-1:0] l_rdata;
  logic          r_req, r_gnt, r_rvalid;
  logic [WORD-1:0] r_rdata;
  pkt_t          rq, rd_hdr;
  logic          rq_v, rd_inflight, rsp_v;
  logic [5:0]    ld_t;

  assign l_req = (state == S_DS) && is_local;
  assign r_req = rq_v && !rd_inflight && !rsp_v;

  lds_bank_mem #(.BYTES(LDS_BYTES), .BANKS(32), .W(WORD)) u_lds (
    .clk, .rst_n,
    .l_req, .l_we(cur.op == OP_DS_WRITE), .l_addr(dladdr), .l_wdata(aux_rdata),
    .l_rvalid, .l_rdata,
    .r_req, .r_we(rq.write), .r_addr(rq.addr[LW-1:0]), .r_wdata(rq.data),
    .r_gnt, .r_rvalid, .r_rdata
  );

  // ---------------- outgoing requests ----------------
  logic issue_ok;
  always_comb begin
    req_out_valid = (state == S_DS) && !is_local;
    req_out_pkt   = '{dst: dcu, src: CU_W'(CU_ID), write: cur.op == OP_DS_WRITE,
                      tag: t[5:0], addr: LADDR_W'(dladdr), data: aux_rdata};
    issue_ok      = (state == S_DS) && (is_local || req_out_ready);
  end

  // register-file writes from the LDS unit: port 0 local reads, port 1 responses
  always_comb begin
    aux_we[0]    = l_rvalid;
    aux_wreg[0]  = cur.vd;
    aux_wthr[0]  = ld_t;
    aux_wdata[0] = l_rdata;
    aux_we[1]    = rsp_in_valid && !rsp_in_pkt.write;
    aux_wreg[1]  = cur.vd;
    aux_wthr[1]  = rsp_in_pkt.tag;
    aux_wdata[1] = rsp_in_pkt.data;
  end

  assign instr_ready = (state == S_IDLE) && (!is_valu || simd_ready);
  assign bar_scope   = cur.scope;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; t <= '0; outstanding <= '0; done <= 1'b0;
      bar_arrive <= 1'b0; ld_t <= '0;
      n_local <= '0; n_remote <= '0;
    end else begin
      done       <= 1'b0;
      bar_arrive <= 1'b0;
      outstanding <= outstanding + 7'(issue_ok && !is_local) - 7'(rsp_in_valid);
      if (issue_ok) begin
        t <= t + 7'd1;
        if (is_local) begin n_local <= n_local + 1; ld_t <= t[5:0]; end
        else          n_remote <= n_remote + 1;
        if (t == 7'd63) state <= S_DRAIN;
      end
      case (state)
        S_IDLE: if (instr_valid && instr_ready) begin
          cur <= instr;
          t   <= '0;
          case (instr.op)
            OP_DS_READ, OP_DS_WRITE: state <= S_DS;
            OP_BARRIER: begin state <= S_BAR; bar_arrive <= 1'b1; end
            default:    state <= S_VALU;
          endcase
        end
        S_VALU:  if (simd_done) begin state <= S_IDLE; done <= 1'b1; end
        S_DRAIN: if (outstanding == 7'(rsp_in_valid) && !l_rvalid && !l_req) begin
          state <= S_IDLE; done <= 1'b1;
        end
        S_BAR:   if (bar_release) begin state <= S_IDLE; done <= 1'b1; end
        default: ;
      endcase
    end
  end

  // ---------------- serving requests from other CUs ----------------
  assign req_in_ready  = !rq_v;
  assign rsp_out_valid = rsp_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_v <= 1'b0; rd_inflight <= 1'b0; rsp_v <= 1'b0; rq <= '0; rd_hdr <= '0;
      rsp_out_pkt <= '0; n_served <= '0; n_conflict <= '0;
    end else begin
      if (req_in_valid && req_in_ready) begin rq <= req_in_pkt; rq_v <= 1'b1; end
      if (rsp_v && rsp_out_ready) rsp_v <= 1'b0;
      if (r_req && !r_gnt) n_conflict <= n_conflict + 1;
      if (r_gnt) begin
        rq_v     <= 1'b0;
        n_served <= n_served + 1;
        if (rq.write) begin
          rsp_v       <= 1'b1;
          rsp_out_pkt <= '{dst: rq.src, src: CU_W'(CU_ID), write: 1'b1, tag: rq.tag,
                           addr: rq.addr, data: '0};
        end else begin
          rd_inflight <= 1'b1;
          rd_hdr      <= rq;
        end
      end
      if (r_rvalid) begin
        rd_inflight <= 1'b0;
        rsp_v       <= 1'b1;
        rsp_out_pkt <= '{dst: rd_hdr.src, src: CU_W'(CU_ID), write: 1'b0, tag: rd_hdr.tag,
                         addr: rd_hdr.addr, data: r_rdata};
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rsp_in_valid |-> outstanding != 0 || issue_ok);
  assert property (@(posedge clk) disable iff (!rst_n) req_in_valid && req_in_ready |-> int'(req_in_pkt.dst) == CU_ID);
  assert property (@(posedge clk) disable iff (!rst_n) rsp_in_valid |-> int'(rsp_in_pkt.dst) == CU_ID);
  initial assert (CU_ID < NUM_CU) else $error("gme_cu: CU_ID out of range");
endmodule
