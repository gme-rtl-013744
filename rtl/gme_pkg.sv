// gme_pkg: types and constants shared by the GME compute-unit extensions.
//
// Sizes follow the MI100-class configuration the design targets: 120 compute
// units in 15 Shader Engines of 8, arranged as a 3 x 5 torus of routers; SIMD16
// units running 64-thread wavefronts; 64 KB of Local Data Share (LDS) per CU in
// 32 banks; 54-bit RNS primes held in 64-bit words. Opcode encodings, the
// packet format and the register-file size are this design's own choices.
package gme_pkg;

  localparam int unsigned WORD      = 64;     // data word / limb container
  localparam int unsigned QBITS     = 54;     // bits of an RNS prime
  localparam int unsigned NUM_ROWS  = 3;      // torus rows of Shader Engines
  localparam int unsigned NUM_COLS  = 5;      // torus columns
  localparam int unsigned CONC      = 8;      // CUs per Shader Engine (router)
  localparam int unsigned NUM_SE    = NUM_ROWS * NUM_COLS;
  localparam int unsigned NUM_CU    = NUM_SE * CONC;       // 120
  localparam int unsigned CU_W      = 7;      // bits of a CU number
  localparam int unsigned LANES     = 16;     // ALUs per SIMD
  localparam int unsigned WAVE      = 64;     // threads per wavefront
  localparam int unsigned LDS_WORDS = 8192;   // 64 KB of 64-bit words
  localparam int unsigned LADDR_W   = 13;     // local LDS word address
  localparam int unsigned GADDR_W   = 20;     // global (GAS) word address
  localparam int unsigned VREG_W    = 6;      // vector register number

  // Vector instructions understood by a GME compute unit.
  typedef enum logic [3:0] {
    OP_MOD_RED  = 4'd0,   // vd = v0 mod q
    OP_MOD_ADD  = 4'd1,   // vd = (v0 + v1) mod q
    OP_MOD_MUL  = 4'd2,   // vd = (v0 * v1) mod q
    OP_MUL_LO   = 4'd3,   // vd = low 64 bits of v0 * v1   (WMAC)
    OP_MAC      = 4'd4,   // vd = vd + v0 * v1 (low 64)     (WMAC)
    OP_DS_READ  = 4'd5,   // vd[t] = GAS[base + t]
    OP_DS_WRITE = 4'd6,   // GAS[base + t] = v0[t]
    OP_BARRIER  = 4'd7    // wait for the barrier of the chosen scope
  } op_e;

  typedef enum logic {SCOPE_SE = 1'b0, SCOPE_GLOBAL = 1'b1} scope_e;

  // One decoded vector instruction, as handed over by the CU's issue stage.
  typedef struct packed {
    op_e                 op;
    logic [VREG_W-1:0]   vd;
    logic [VREG_W-1:0]   vs0;
    logic [VREG_W-1:0]   vs1;
    logic [WORD-1:0]     q;      // scalar s0: modulus
    logic [WORD-1:0]     mu;     // scalar s1: Barrett constant floor(2^(2*QBITS)/q)
    logic [GADDR_W-1:0]  base;   // LDS instructions: global word address of thread 0
    scope_e              scope;  // barrier scope
  } vinstr_t;

  // Single-flit cNoC packet. Requests carry an access to a remote LDS, responses
  // carry read data (or a write acknowledgement) back to the requester.
  typedef struct packed {
    logic [CU_W-1:0]    dst;     // destination CU
    logic [CU_W-1:0]    src;     // source CU
    logic               write;   // request: write; response: ack of a write
    logic [5:0]         tag;     // thread number within the wavefront
    logic [LADDR_W-1:0] addr;    // local word address in the destination LDS
    logic [WORD-1:0]    data;
  } pkt_t;

  localparam int unsigned PKT_W = $bits(pkt_t);

  // Router port numbering: 0..CONC-1 are the CUs of the Shader Engine.
  localparam int unsigned P_XP = CONC;      // towards column+1
  localparam int unsigned P_XM = CONC + 1;  // towards column-1
  localparam int unsigned P_YP = CONC + 2;  // towards row+1
  localparam int unsigned P_YM = CONC + 3;  // towards row-1
  localparam int unsigned NPORT = CONC + 4;

endpackage
