// tb_labs_dispatcher: self-checking test of the LABS command queue and dispatcher.
// A random dependency graph of 60 blocks, each mapped to one of six CUs, is
// pushed in schedule order. Model CUs finish each block after a random time.
// Every launch must follow schedule order, go to the mapped CU while that CU is
// idle, and come only after the block's producers finished. Dependency and
// busy stalls must both occur and all blocks must launch.
module tb_labs_dispatcher;
  import gme_pkg::*;
  localparam int NCU = 120, NB = 60;
  logic clk = 0, rst_n = 0;
  logic cq_valid, cq_ready; logic [7:0] cq_blk; logic [6:0] cq_cu; logic [1:0] cq_dep_v; logic [7:0] cq_dep [2];
  logic launch_valid; logic [6:0] launch_cu; logic [7:0] launch_blk;
  logic [NCU-1:0] blk_done;
  logic [31:0] n_launched, n_dep_stall, n_busy_stall;
  int checks = 0, failures = 0;
  int cu_of [NB], dep [NB][2]; bit dv [NB][2];
  bit finished [NB]; int remaining [NCU]; int blk_on [NCU];
  int next_launch = 0;

  labs_dispatcher dut (.*);
  always #5 clk = ~clk;

  // model CUs
  always @(negedge clk) begin
    blk_done = '0;
    for (int c = 0; c < NCU; c++) if (remaining[c] > 0) begin
      remaining[c]--;
      if (remaining[c] == 0) begin blk_done[c] = 1; finished[blk_on[c]] = 1; end
    end
  end

  always @(posedge clk) if (rst_n && launch_valid) begin
    int b; b = int'(launch_blk);
    checks++;
    if (b != next_launch || int'(launch_cu) != cu_of[b] || remaining[launch_cu] != 0 ||
        (dv[b][0] && !finished[dep[b][0]]) || (dv[b][1] && !finished[dep[b][1]])) begin
      failures++; $display("bad launch of block %0d on CU %0d", b, launch_cu);
    end
    next_launch++;
    remaining[launch_cu] = $urandom_range(25, 2); blk_on[launch_cu] = b;
  end

  initial begin
    cq_valid = 0; cq_blk = 0; cq_cu = 0; cq_dep_v = 0; cq_dep = '{default: '0};
    foreach (remaining[c]) remaining[c] = 0;
    for (int b = 0; b < NB; b++) begin
      cu_of[b] = $urandom_range(5, 0) * 20;
      for (int k = 0; k < 2; k++) begin
        dv[b][k] = (b > 0) && $urandom_range(2, 0) != 0;
        dep[b][k] = (b > 0) ? $urandom_range(b - 1, (b > 8) ? b - 8 : 0) : 0;
      end
      finished[b] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      cq_valid = 1; cq_blk = 8'(b); cq_cu = 7'(cu_of[b]);
      cq_dep_v = {dv[b][1], dv[b][0]}; cq_dep[0] = 8'(dep[b][0]); cq_dep[1] = 8'(dep[b][1]);
      while (!cq_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) cq_valid = 0;
    while (next_launch < NB) @(posedge clk);
    repeat (40) @(posedge clk);
    checks++; if (n_launched != NB) failures++;
    checks++; if (n_dep_stall == 0 || n_busy_stall == 0) failures++;
    $display("launched %0d dep stalls %0d busy stalls %0d", n_launched, n_dep_stall, n_busy_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
