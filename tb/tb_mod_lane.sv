// tb_mod_lane: self-checking test of one MOD/WMAC lane.
// Runs bursts of each operation (mod-red, mod-add, mod-mult, mul_lo, mac) with
// random 54-bit moduli and compares results and latencies (3, 13, 19, 6, 6
// cycles) with values computed by the testbench with % and *.
module tb_mod_lane;
  import gme_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid; op_e op; logic [63:0] a, b, c, q, mu;
  logic out_valid; logic [63:0] r;
  int checks = 0, failures = 0, cycle = 0;
  logic [63:0] expq [$]; int cycq [$]; int latq [$];

  mod_lane dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int lat_of(op_e o);
    case (o)
      OP_MOD_ADD: return 3;
      OP_MOD_RED: return 13;
      OP_MOD_MUL: return 19;
      default:    return 6;
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      logic [63:0] e; int cy, l;
      checks++;
      if (expq.size() == 0) begin failures++; $display("spurious output"); end
      else begin
        e = expq.pop_front(); cy = cycq.pop_front(); l = latq.pop_front();
        if (r !== e || cycle - cy != l) begin
          failures++; $display("mismatch r=%h exp=%h lat=%0d want %0d", r, e, cycle - cy, l);
        end
      end
    end
  end

  task automatic burst(op_e o, int n);
    logic [127:0] qq;
    qq = {74'b0, 1'b1, 21'($urandom), 32'($urandom)};
    for (int i = 0; i < n; i++) begin
      logic [127:0] aa, bb, e;
      @(negedge clk);
      op = o; q = 64'(qq); mu = 64'((128'(1) << 108) / qq);
      aa = {64'b0, $urandom, $urandom}; bb = {64'b0, $urandom, $urandom};
      c  = {$urandom, $urandom};
      if (o inside {OP_MOD_ADD, OP_MOD_MUL}) begin aa = aa % qq; bb = bb % qq; end
      if (i == 0 && o != OP_MOD_RED) begin aa = qq - 1; bb = qq - 1; end
      // boundary cases: a sum of exactly q, and a sum of q - 1
      if (i == 1 && o == OP_MOD_ADD) begin bb = 128'($urandom_range(1000, 1)); aa = qq - bb; end
      if (i == 2 && o == OP_MOD_ADD) begin bb = 128'($urandom_range(1000, 1)); aa = qq - bb - 1; end
      a = 64'(aa); b = 64'(bb);
      case (o)
        OP_MOD_RED: e = aa % qq;
        OP_MOD_ADD: e = (aa + bb) % qq;
        OP_MOD_MUL: e = (aa * bb) % qq;
        OP_MUL_LO:  e = aa * bb;
        default:    e = 128'(c) + aa * bb;
      endcase
      in_valid = 1;
      expq.push_back(64'(e)); cycq.push_back(cycle); latq.push_back(lat_of(o));
      @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    repeat (25) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; op = OP_MOD_RED; a = 0; b = 0; c = 0; q = 1; mu = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 10; k++) begin
      burst(OP_MOD_RED, 30); burst(OP_MOD_ADD, 30); burst(OP_MOD_MUL, 30);
      burst(OP_MUL_LO, 20);  burst(OP_MAC, 20);
    end
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
