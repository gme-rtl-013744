// tb_gme_cu: self-checking test of one GME compute unit (CU 0 of 4).
// The testbench plays the network and the three other CUs' LDSs. It preloads
// the CU's own LDS with write requests from "other CUs" and checks their
// acknowledgements; runs ds_read of two wavefronts spread over all four CUs,
// a mod-mult of the two, and ds_write of the product; checks every word that
// reached the other CUs and reads the CU's own words back over the network.
// Meanwhile it keeps sending read requests to create bank conflicts, and it
// checks a barrier instruction waits for its release. Responses to the CU come
// back out of order after random delays.
module tb_gme_cu;
  import gme_pkg::*;
  localparam int NCU = 4, LW = 8192;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, done;
  vinstr_t instr;
  logic bar_arrive, bar_release; scope_e bar_scope;
  logic req_out_valid, req_out_ready, req_in_valid, req_in_ready;
  logic rsp_out_valid, rsp_out_ready, rsp_in_valid;
  pkt_t req_out_pkt, req_in_pkt, rsp_out_pkt, rsp_in_pkt;
  logic [31:0] n_local, n_remote, n_served, n_conflict;
  int checks = 0, failures = 0;

  logic [63:0] mem [NCU][LW];          // model of every LDS (CU 0's is the reference copy)
  pkt_t pend [$];                      // responses the network still owes CU 0
  pkt_t exp_rsp [$];                   // responses CU 0 owes the testbench
  logic [127:0] Q;
  logic bg_en;
  int local_words [$];

  gme_cu #(.CU_ID(0), .NUM_CU(NCU)) dut (.*);
  always #5 clk = ~clk;

  function automatic int owner(int a);
    int slot = a % NCU, off = a / NCU, h = (off & 15) ^ ((off >> 4) & 15);
    return (slot + h) % NCU;
  endfunction

  // the network towards the other CUs
  assign req_out_ready = 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (req_out_valid) begin
      pkt_t p, r;
      p = req_out_pkt;
      checks++;
      if (p.dst == 0 || int'(p.src) != 0) begin failures++; $display("bad request dst %0d", p.dst); end
      r = '0; r.dst = 0; r.src = p.dst; r.write = p.write; r.tag = p.tag; r.addr = p.addr;
      if (p.write) mem[p.dst][p.addr] = p.data; else r.data = mem[p.dst][p.addr];
      pend.push_back(r);
    end
  end
  always @(negedge clk) begin
    rsp_in_valid = 0;
    if (pend.size() > 0 && $urandom_range(2, 0) == 0) begin
      int k; k = $urandom_range(pend.size() - 1, 0);
      rsp_in_pkt = pend[k]; pend.delete(k); rsp_in_valid = 1;
    end
  end

  // requests from other CUs into CU 0, and their responses
  logic bg_busy;
  always @(posedge clk) if (rst_n) begin
    if (req_in_valid && req_in_ready) begin
      pkt_t r;
      r = '0; r.dst = req_in_pkt.src; r.src = 0; r.write = req_in_pkt.write; r.tag = req_in_pkt.tag;
      r.addr = req_in_pkt.addr;
      if (req_in_pkt.write) mem[0][req_in_pkt.addr] = req_in_pkt.data;
      else r.data = mem[0][req_in_pkt.addr];
      exp_rsp.push_back(r);
    end
    if (rsp_out_valid && rsp_out_ready) begin
      pkt_t e;
      checks++;
      e = exp_rsp.pop_front();
      if (rsp_out_pkt !== e) begin failures++; $display("response %h want %h", rsp_out_pkt, e); end
    end
  end

  task automatic send_req(int src, bit wr, int addr, logic [63:0] d);
    @(negedge clk);
    req_in_valid = 1; req_in_pkt = '0; req_in_pkt.dst = 0; req_in_pkt.src = 7'(src);
    req_in_pkt.write = wr; req_in_pkt.addr = 13'(addr); req_in_pkt.data = d; req_in_pkt.tag = 6'(addr);
    while (!req_in_ready) @(negedge clk);
    @(posedge clk); #1 req_in_valid = 0;
  endtask

  task automatic exec(vinstr_t i);
    @(negedge clk); instr = i; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0;
    while (!done) @(posedge clk);
  endtask

  // background readers of CU 0's LDS, for bank conflicts
  initial begin
    bg_en = 0;
    forever begin
      @(negedge clk);
      if (bg_en && !req_in_valid) begin
        req_in_valid = 1; req_in_pkt = '0; req_in_pkt.src = 7'($urandom_range(3, 1));
        req_in_pkt.addr = 13'(32 * $urandom_range(13, 0) + ($urandom_range(16, 0) + 25) % 32); req_in_pkt.tag = 6'($urandom);
        while (!req_in_ready) @(negedge clk);
        @(posedge clk); #1 req_in_valid = 0;
      end
    end
  end

  initial begin
    vinstr_t i;
    int B1 = 100, B2 = 1000, B3 = 2000;
    instr_valid = 0; instr = '0; bar_release = 0; req_in_valid = 0; req_in_pkt = '0;
    rsp_in_valid = 0; rsp_in_pkt = '0; rsp_out_ready = 1;
    Q = {74'b0, 1'b1, 21'($urandom), 32'($urandom)};
    for (int c = 0; c < NCU; c++) for (int a = 0; a < LW; a++) mem[c][a] = (c == 0) ? 64'hdead : 64'({$urandom, $urandom} % Q);
    repeat (3) @(posedge clk); rst_n = 1;
    // preload CU 0's own LDS words below 700 through the remote port
    for (int a = 0; a < 700; a++) send_req($urandom_range(3, 1), 1, a, 64'({$urandom, $urandom} % Q));
    repeat (5) @(posedge clk);
    fork begin
      bg_en = 1;
      i = '0; i.op = OP_DS_READ; i.vd = 1; i.base = 20'(B1); exec(i);
      i.vd = 2; i.base = 20'(B2); exec(i);
      i = '0; i.op = OP_MOD_MUL; i.vd = 3; i.vs0 = 1; i.vs1 = 2; i.q = 64'(Q); i.mu = 64'((128'(1) << 108) / Q); exec(i);
      i = '0; i.op = OP_DS_WRITE; i.vs0 = 3; i.base = 20'(B3); exec(i);
      bg_en = 0;
    end join
    repeat (20) @(posedge clk);
    // check the product landed everywhere
    for (int t = 0; t < 64; t++) begin
      int a1, a2, a3; logic [127:0] x, y, e;
      a1 = B1 + t; a2 = B2 + t; a3 = B3 + t;
      x = 128'(mem[owner(a1)][a1 / NCU]); y = 128'(mem[owner(a2)][a2 / NCU]);
      e = (x * y) % Q;
      if (owner(a3) == 0) begin
        mem[0][a3 / NCU] = 64'(e);   // checked below by reading it back over the network
        local_words.push_back(a3 / NCU);
        continue;
      end
      checks++;
      if (mem[owner(a3)][a3 / NCU] !== 64'(e)) begin failures++; $display("thread %0d result %h want %h (cu %0d)", t, mem[owner(a3)][a3/NCU], e, owner(a3)); end
    end
    // read CU 0's words back through the network: responses are compared above
    for (int a = 0; a < 700; a += 7) send_req(2, 0, a, 0);
    foreach (local_words[k]) send_req(1, 0, local_words[k], 0);
    checks++; if (local_words.size() == 0) failures++;
    repeat (20) @(posedge clk);
    // barrier
    i = '0; i.op = OP_BARRIER; i.scope = SCOPE_GLOBAL;
    fork
      exec(i);
      begin
        while (!bar_arrive) @(posedge clk);
        checks++; if (bar_scope != SCOPE_GLOBAL) failures++;
        repeat (10) @(posedge clk);
        checks++; if (done) failures++;
        @(negedge clk) bar_release = 1; @(negedge clk) bar_release = 0;
      end
    join
    checks++; if (n_local == 0 || n_remote == 0 || n_conflict == 0 || exp_rsp.size() != 0) failures++;
    $display("local %0d remote %0d served %0d conflicts %0d", n_local, n_remote, n_served, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
