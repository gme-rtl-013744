// tb_noc_router: self-checking test of one torus router (row 1, column 2 of 3 x 5).
// Random packets enter all 12 inputs while the downstream free counts vary at
// random. Each packet leaving is checked against the testbench's own
// dimension-order route (X first, shorter way round), must have been sent and
// not yet delivered, and must respect the bubble rule: 2 free slots downstream
// to enter a ring, 1 to stay in it. At the end every packet must be out.
module tb_noc_router;
  import gme_pkg::*;
  localparam int ROWS = 3, COLS = 5, MR = 1, MC = 2, NP = 12, D = 4;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid, out_valid;
  pkt_t in_pkt [NP], out_pkt [NP];
  logic [2:0] in_free [NP], out_free [NP];
  int checks = 0, failures = 0, sent = 0, got = 0, bubbles = 0;
  bit live [int];
  int cycle = 0;

  noc_router #(.CONC(8), .ROWS(ROWS), .COLS(COLS), .MY_ROW(MR), .MY_COL(MC), .FIFO_DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_port(int dst);
    int se = dst / 8, r = se / COLS, c = se % COLS;
    int fx = (c - MC + COLS) % COLS, fy = (r - MR + ROWS) % ROWS;
    if (c != MC) return (fx <= COLS - fx) ? 8 : 9;
    if (r != MR) return (fy <= ROWS - fy) ? 10 : 11;
    return dst % 8;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) if (out_valid[o]) begin
      int id, need;
      id = int'(out_pkt[o].data);
      need = (o < 8 || (o == 8 && id % NP == 9) || (o == 9 && id % NP == 8) ||
              (o == 10 && id % NP == 11) || (o == 11 && id % NP == 10)) ? 1 : 2;
      checks++;
      if (!live.exists(id) || ref_port(int'(out_pkt[o].dst)) != o || int'(out_free[o]) < need) begin
        failures++; $display("bad output port %0d id %0d dst %0d free %0d", o, id, out_pkt[o].dst, out_free[o]);
      end
      if (need == 2 && out_free[o] == 2) bubbles++;
      live.delete(id); got++;
    end
  end

  initial begin
    in_valid = '0; in_pkt = '{default: '0}; out_free = '{default: 3'd0};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int o = 0; o < NP; o++) out_free[o] = 3'($urandom_range(D, 0));
      for (int p = 0; p < NP; p++) begin
        in_valid[p] = (n < 2500) && ($urandom % 3 == 0) && in_free[p] != 0;
        in_pkt[p] = '0;
        in_pkt[p].dst  = 7'($urandom_range(119, 0));
        in_pkt[p].data = 64'(sent * NP + p);   // id; id mod NP = input port
        if (in_valid[p]) begin live[sent * NP + p] = 1; end
      end
      sent++;
    end
    @(negedge clk) in_valid = '0;
    checks++; if (live.size() != 0) begin failures++; $display("%0d packets stuck", live.size()); end
    checks++; if (bubbles == 0) failures++;
    $display("delivered %0d, ring entries at exactly 2 free slots %0d", got, bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
