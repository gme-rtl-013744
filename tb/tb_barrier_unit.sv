// tb_barrier_unit: self-checking test of the Shader-Engine and global barriers.
// Random CUs (with a random member mask) arrive at random times; a testbench
// model decides when each Shader Engine barrier and the global barrier must
// complete, and every release pulse is compared with it cycle by cycle. In
// two global rounds CU 0 is held back to arrive last.
module tb_barrier_unit;
  import gme_pkg::*;
  localparam int NCU = 120, C = 8, NSE = 15;
  logic clk = 0, rst_n = 0;
  logic [NCU-1:0] member, arrive, release_o;
  scope_e scope [NCU];
  int checks = 0, failures = 0, se_rel = 0, gl_rel = 0;
  bit a_se [NCU], a_gl [NCU], waiting [NCU], went [NCU];
  logic [NCU-1:0] exp_rel;
  bit others_went;

  barrier_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    member = '0; arrive = '0; scope = '{default: SCOPE_SE}; exp_rel = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      if (round == 0) @(negedge clk);
      foreach (went[i]) went[i] = 0;
      if (round == 0) for (int i = 0; i < NCU; i++) member[i] = ($urandom_range(9, 0) != 0);
      if (round == 0) member[0] = 1;
      for (int n = 0; n < 400; n++) begin
        // compare release pulses with the model's expectation from the last edge
        checks++;
        if (release_o !== exp_rel) begin failures++; $display("round %0d cycle %0d release mismatch", round, n); end
        foreach (exp_rel[i]) if (exp_rel[i]) waiting[i] = 0;
        arrive = '0;
        // in rounds 1 and 3 CU 0 is the last to reach the global barrier
        others_went = 1;
        for (int i = 1; i < NCU; i++) if (member[i] && !went[i]) others_went = 0;
        for (int i = 0; i < NCU; i++)
          if (member[i] && !waiting[i] && !went[i] && $urandom_range(30, 0) == 0 &&
              !(i == 0 && (round == 1 || round == 3) && !others_went)) begin
            arrive[i] = 1; went[i] = 1; scope[i] = (round % 2) ? SCOPE_GLOBAL : SCOPE_SE; waiting[i] = 1;
            if (round == 5) scope[i] = ($urandom_range(1, 0) != 0) ? SCOPE_GLOBAL : SCOPE_SE;
            if (scope[i] == SCOPE_SE) a_se[i] = 1; else a_gl[i] = 1;
          end
        // model: which barriers complete at this edge
        exp_rel = '0;
        begin
          bit all_gl, any_gl;
          all_gl = 1; any_gl = 0;
          for (int i = 0; i < NCU; i++) if (member[i]) begin
            if (!a_gl[i]) all_gl = 0; else any_gl = 1;
          end
          if (all_gl && any_gl) begin
            gl_rel++;
            for (int i = 0; i < NCU; i++) if (member[i] && a_gl[i]) begin exp_rel[i] = 1; a_gl[i] = 0; end
          end
        end
        for (int s = 0; s < NSE; s++) begin
          bit all_se, any_se;
          all_se = 1; any_se = 0;
          for (int k = 0; k < C; k++) if (member[s*C+k]) begin
            if (!a_se[s*C+k]) all_se = 0; else any_se = 1;
          end
          if (all_se && any_se) begin
            se_rel++;
            for (int k = 0; k < C; k++) if (member[s*C+k] && a_se[s*C+k]) begin exp_rel[s*C+k] = 1; a_se[s*C+k] = 0; end
          end
        end
        @(negedge clk);
      end
      // let everybody still waiting finish: non-members never block
      arrive = '0;
    end
    checks++; if (se_rel == 0 || gl_rel == 0) failures++;
    $display("SE barriers %0d, global barriers %0d", se_rel, gl_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
