// tb_simd_unit: self-checking test of the SIMD16 unit with MOD/WMAC lanes.
// Fills registers through the aux write ports, runs every vector operation on
// a full 64-thread wavefront, reads vd back through the aux read port and
// compares it with the testbench's own arithmetic. Also checks the latency from
// the accepting edge to done: mod-add 7, mod-red 17, mod-mul 23, mul/mac 10.
module tb_simd_unit;
  import gme_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, done;
  vinstr_t instr;
  logic [VREG_W-1:0] aux_rreg; logic [5:0] aux_rthr; logic [63:0] aux_rdata;
  logic [1:0] aux_we; logic [VREG_W-1:0] aux_wreg [2]; logic [5:0] aux_wthr [2]; logic [63:0] aux_wdata [2];
  int checks = 0, failures = 0, cycle = 0;
  logic [63:0] model [16][64];

  simd_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic wr(int r, int t, logic [63:0] d);
    @(negedge clk); aux_we = 2'b01; aux_wreg[0] = VREG_W'(r); aux_wthr[0] = 6'(t); aux_wdata[0] = d;
    @(posedge clk); #1 aux_we = 0; model[r][t] = d;
  endtask

  task automatic run(op_e op, int vd, int v0, int v1, logic [127:0] qq, int lat);
    int c0;
    logic [127:0] e;
    @(negedge clk);
    instr = '0; instr.op = op; instr.vd = VREG_W'(vd); instr.vs0 = VREG_W'(v0); instr.vs1 = VREG_W'(v1);
    instr.q = 64'(qq); instr.mu = 64'((128'(1) << 108) / qq);
    in_valid = 1; c0 = cycle;
    @(posedge clk); #1 in_valid = 0;
    while (!done) @(posedge clk);
    checks++;
    // done rises one edge after the last write-back edge
    if (cycle - c0 - 1 != lat) begin failures++; $display("op %s latency %0d want %0d", op.name(), cycle - c0 - 1, lat); end
    for (int t = 0; t < 64; t++) begin
      logic [127:0] a, b;
      a = 128'(model[v0][t]); b = 128'(model[v1][t]);
      case (op)
        OP_MOD_RED: e = a % qq;
        OP_MOD_ADD: e = (a + b) % qq;
        OP_MOD_MUL: e = (a * b) % qq;
        OP_MUL_LO:  e = a * b;
        default:    e = 128'(model[vd][t]) + a * b;
      endcase
      model[vd][t] = 64'(e);
    end
    for (int t = 0; t < 64; t++) begin
      aux_rreg = VREG_W'(vd); aux_rthr = 6'(t); #1;
      checks++;
      if (aux_rdata !== model[vd][t]) begin failures++; $display("op %s t%0d got %h want %h", op.name(), t, aux_rdata, model[vd][t]); end
    end
  endtask

  initial begin
    logic [127:0] qq;
    in_valid = 0; instr = '0; aux_we = 0; aux_rreg = 0; aux_rthr = 0;
    aux_wreg = '{default: '0}; aux_wthr = '{default: '0}; aux_wdata = '{default: '0};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      qq = {74'b0, 1'b1, 21'($urandom), 32'($urandom)};
      for (int r = 0; r < 4; r++) for (int t = 0; t < 64; t++)
        wr(r, t, (r < 2) ? 64'(({$urandom, $urandom} % qq)) : {$urandom, $urandom});
      run(OP_MOD_ADD, 4, 0, 1, qq, 7);
      run(OP_MOD_MUL, 5, 0, 1, qq, 23);
      run(OP_MOD_RED, 6, 2, 2, qq, 17);
      run(OP_MUL_LO,  7, 2, 3, qq, 10);
      run(OP_MAC,     7, 0, 3, qq, 10);
      run(OP_MOD_MUL, 0, 0, 5, qq, 23);   // destination equals a source
      run(OP_MOD_ADD, 63, 0, 1, qq, 7);   // highest register
      run(OP_MOD_ADD, 40, 63, 4, qq, 7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
