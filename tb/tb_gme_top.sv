// tb_gme_top: end-to-end test of gme_top at a reduced size: 2 x 2 Shader Engines of 2 CUs.
// The testbench plays the GPU front end. Every word of global LDS space used
// is first given a known value f(A) = (A * 0x9E3779B97F4A7C15) mod q directly
// in the LDS arrays. A LABS schedule then launches one block per CU; each
// block loads two wavefronts from the global space (local and remote LDS),
// runs mod-mult, mod-add, mod-red, mul_lo and mac on them, stores results,
// meets the other CUs at a global barrier, loads a result another CU stored,
// copies it out and meets its Shader Engine at an SE barrier. A second wave
// of blocks depends on the first and lands on busy CUs, so the dispatcher
// must stall for both reasons. At the end every stored word is compared with
// values computed here, and each mechanism (local and remote access, bank
// conflict, both barrier scopes, both dispatch stalls, every vector op) must
// have happened at least once.
module tb_gme_top;
  import gme_pkg::*;
  localparam int ROWS = 2, COLS = 2, CONC = 2;
  localparam int N = ROWS * COLS * CONC, LW = 8192;
  localparam int A0 = 0, B0 = 64 * N, C0 = 128 * N, D0 = 192 * N, E0 = 256 * N;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] instr_valid, instr_ready, done, bar_member, blk_done;
  vinstr_t instr [N];
  logic cq_valid, cq_ready; logic [7:0] cq_blk; logic [6:0] cq_cu; logic [1:0] cq_dep_v; logic [7:0] cq_dep [2];
  logic launch_valid; logic [6:0] launch_cu; logic [7:0] launch_blk;
  logic [31:0] n_local [N], n_remote [N], n_served [N], n_conflict [N];
  logic [31:0] n_launched, n_dep_stall, n_busy_stall;
  int checks = 0, failures = 0, cycle = 0;
  int ops_seen [8];
  int se_bar = 0, gl_bar = 0;
  logic [127:0] Q, MU;
  logic [63:0] lds_copy [N][LW];
  logic snap = 0, preload = 0;

  gme_top #(.ROWS(2), .COLS(2), .CONC(2)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [63:0] f(int a);
    return 64'((128'(a) * 128'(64'h9E3779B97F4A7C15)) % Q);
  endfunction
  function automatic int owner(int a);
    int slot = a % N, off = a / N, h = (off & 15) ^ ((off >> 4) & 15);
    return (slot + h) % N;
  endfunction

  // backdoor access to the LDS arrays: preload and final snapshot
  for (genvar i = 0; i < N; i++) begin : g_bd
    always @(posedge preload)
      for (int a = 0; a < 320 * N; a++)
        if (owner(a) == i) dut.g_cu[i].u_cu.u_lds.mem[(a / N) % 32][(a / N) / 32] = f(a);
    always @(posedge snap)
      for (int w = 0; w < LW; w++) lds_copy[i][w] = dut.g_cu[i].u_cu.u_lds.mem[w % 32][w / 32];
  end
  function automatic logic [63:0] peek(int a);
    return lds_copy[owner(a)][a / N];
  endfunction

  // count barrier completions by scope
  always @(posedge clk) if (rst_n) begin
    if (|dut.bar_release) begin
      for (int i = 0; i < N; i++) if (dut.bar_release[i]) begin
        if (dut.bar_scope[i] == SCOPE_GLOBAL) gl_bar++; else se_bar++;
        break;
      end
    end
  end

  task automatic issue(int c, op_e op, int vd, int v0, int v1, int base, scope_e sc);
    vinstr_t i;
    i = '0; i.op = op; i.vd = VREG_W'(vd); i.vs0 = VREG_W'(v0); i.vs1 = VREG_W'(v1); i.q = 64'(Q); i.mu = 64'(MU);
    i.base = 20'(base); i.scope = sc;
    @(negedge clk); instr[c] = i; instr_valid[c] = 1;
    while (!instr_ready[c]) @(negedge clk);
    @(posedge clk); #1 instr_valid[c] = 0;
    while (!done[c]) @(posedge clk);
    ops_seen[op]++;
  endtask

  task automatic block_main(int c);
    issue(c, OP_DS_READ,  1, 0, 0, A0 + 64 * c, SCOPE_SE);
    issue(c, OP_DS_READ,  2, 0, 0, B0 + 64 * ((c + 1) % N), SCOPE_SE);
    issue(c, OP_MOD_MUL,  3, 1, 2, 0, SCOPE_SE);
    issue(c, OP_MOD_ADD,  4, 3, 1, 0, SCOPE_SE);
    issue(c, OP_MOD_RED,  5, 4, 0, 0, SCOPE_SE);
    issue(c, OP_MUL_LO,   6, 1, 2, 0, SCOPE_SE);
    issue(c, OP_MAC,      6, 5, 2, 0, SCOPE_SE);
    issue(c, OP_DS_WRITE, 0, 5, 0, C0 + 64 * c, SCOPE_SE);
    issue(c, OP_DS_WRITE, 0, 6, 0, E0 + 64 * c, SCOPE_SE);
    issue(c, OP_BARRIER,  0, 0, 0, 0, SCOPE_GLOBAL);
    issue(c, OP_DS_READ,  7, 0, 0, C0 + 64 * ((c + 3) % N), SCOPE_SE);
    issue(c, OP_DS_WRITE, 0, 7, 0, D0 + 64 * c, SCOPE_SE);
    issue(c, OP_BARRIER,  0, 0, 0, 0, SCOPE_SE);
  endtask

  task automatic block_small(int c);
    issue(c, OP_MOD_ADD, 8, 1, 1, 0, SCOPE_SE);
  endtask

  // front end: run the block the dispatcher launched, then report it done
  always @(posedge clk) if (rst_n && launch_valid) begin
    automatic int c = int'(launch_cu);
    automatic int b = int'(launch_blk);
    fork begin
      if (b < N) block_main(c); else block_small(c);
      @(negedge clk) blk_done[c] = 1;
      @(negedge clk) blk_done[c] = 0;
    end join_none
  end

  initial begin
    instr_valid = '0; instr = '{default: '0}; bar_member = '1; blk_done = '0;
    cq_valid = 0; cq_blk = 0; cq_cu = 0; cq_dep_v = 0; cq_dep = '{default: '0};
    foreach (ops_seen[k]) ops_seen[k] = 0;
    Q  = {74'b0, 1'b1, 21'($urandom), 32'($urandom)};
    MU = (128'(1) << 108) / Q;
    #1 preload = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    // LABS schedule: wave 1 = block c on CU c; wave 2 = block N+c on CU (c+1) mod N after blocks c and c+2
    for (int b = 0; b <= 2 * N; b++) begin
      @(negedge clk);
      cq_valid = 1; cq_blk = 8'(b);
      if (b < N) begin cq_cu = 7'(b); cq_dep_v = 2'b00; end
      else begin
        cq_cu = (b == 2 * N) ? 7'(0) : 7'((b - N + 1) % N); cq_dep_v = (b == 2 * N) ? 2'b00 : 2'b11;
        cq_dep[0] = 8'(b - N); cq_dep[1] = 8'((b - N + 2) % N);
      end
      while (!cq_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) cq_valid = 0;
    while (n_launched != 32'(2 * N + 1) || blk_done != '0 || !(&instr_ready)) @(posedge clk);
    repeat (50) @(posedge clk);
    snap = 1; #1;
    // check every stored word
    for (int c = 0; c < N; c++) for (int t = 0; t < 64; t++) begin
      logic [127:0] x, y, p, s, m;
      int c3;
      x = 128'(f(A0 + 64 * c + t)); y = 128'(f(B0 + 64 * ((c + 1) % N) + t));
      p = (x * y) % Q; s = (p + x) % Q;
      m = 128'(64'(x * y)) + s * y;
      checks++; if (peek(C0 + 64 * c + t) !== 64'(s)) begin failures++; if (failures < 10) $display("C cu%0d t%0d", c, t); end
      checks++; if (peek(E0 + 64 * c + t) !== 64'(m)) begin failures++; if (failures < 10) $display("E cu%0d t%0d", c, t); end
      c3 = (c + 3) % N;
      x = 128'(f(A0 + 64 * c3 + t)); y = 128'(f(B0 + 64 * ((c3 + 1) % N) + t));
      s = (((x * y) % Q) + x) % Q;
      checks++; if (peek(D0 + 64 * c + t) !== 64'(s)) begin failures++; if (failures < 10) $display("D cu%0d t%0d", c, t); end
    end
    // every mechanism must have happened
    begin
      longint loc, rem, con, srv;
      loc = 0; rem = 0; con = 0; srv = 0;
      for (int c = 0; c < N; c++) begin loc += n_local[c]; rem += n_remote[c]; con += n_conflict[c]; srv += n_served[c]; end
      $display("local %0d remote %0d served %0d bank-conflict stalls %0d", loc, rem, srv, con);
      $display("SE barriers %0d global barriers %0d launches %0d dep stalls %0d busy stalls %0d",
               se_bar, gl_bar, n_launched, n_dep_stall, n_busy_stall);
      $display("ops: mod_red %0d mod_add %0d mod_mul %0d mul_lo %0d mac %0d ds_read %0d ds_write %0d barrier %0d",
               ops_seen[0], ops_seen[1], ops_seen[2], ops_seen[3], ops_seen[4], ops_seen[5], ops_seen[6], ops_seen[7]);
      checks++; if (loc == 0) failures++;
      checks++; if (rem == 0 || rem != srv) failures++;
      checks++; if (con == 0) failures++;
      checks++; if (se_bar == 0) failures++;
      checks++; if (gl_bar == 0) failures++;
      checks++; if (n_dep_stall == 0) failures++;
      checks++; if (n_busy_stall == 0) failures++;
      foreach (ops_seen[k]) begin checks++; if (ops_seen[k] == 0) failures++; end
    end
    $display("finished after %0d cycles", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
