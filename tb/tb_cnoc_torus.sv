// tb_cnoc_torus: self-checking test of the full 3 x 5 x 8 concentrated torus.
// All 120 CUs inject packets to random CUs (and, in a second phase, all to a
// few hot spots) while ejection is randomly refused. Every packet must reach
// the CU it was sent to exactly once, and the network must drain completely,
// which it could not if it deadlocked.
module tb_cnoc_torus;
  import gme_pkg::*;
  localparam int NCU = 120;
  logic clk = 0, rst_n = 0;
  logic [NCU-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  pkt_t inj_pkt [NCU], ej_pkt [NCU];
  int checks = 0, failures = 0, sent = 0, got = 0;
  int dest_of [int];
  int cycle = 0;

  cnoc_torus dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NCU; i++) if (ej_valid[i] && ej_ready[i]) begin
      int id;
      id = int'(ej_pkt[i].data);
      checks++;
      if (!dest_of.exists(id) || dest_of[id] != i || int'(ej_pkt[i].dst) != i) begin
        failures++; $display("packet %0d at CU %0d dst %0d want %0d", id, i, ej_pkt[i].dst, dest_of.exists(id) ? dest_of[id] : -1);
      end
      dest_of.delete(id); got++;
    end
  end

  initial begin
    inj_valid = '0; inj_pkt = '{default: '0}; ej_ready = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      for (int i = 0; i < NCU; i++) begin
        ej_ready[i] = $urandom % 4 != 0;
        inj_valid[i] = ($urandom % 4 == 0) && inj_ready[i];
        inj_pkt[i] = '0;
        inj_pkt[i].src = 7'(i);
        inj_pkt[i].dst = (n >= 300) ? 7'($urandom_range(2, 0) * 41) : 7'($urandom_range(NCU-1, 0));
        inj_pkt[i].data = 64'(n * NCU + i);
        if (inj_valid[i]) begin dest_of[n * NCU + i] = int'(inj_pkt[i].dst); sent++; end
      end
    end
    @(negedge clk) inj_valid = '0; ej_ready = '1;
    repeat (3000) @(posedge clk);
    checks++; if (dest_of.size() != 0) begin failures++; $display("%0d packets not delivered", dest_of.size()); end
    $display("sent %0d delivered %0d", sent, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
