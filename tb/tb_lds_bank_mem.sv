// tb_lds_bank_mem: self-checking test of the banked LDS.
// Random traffic on both ports against a testbench copy of the memory: every
// read returns the expected word one cycle later, and the remote port is
// refused exactly when the local port uses the same bank in that cycle.
module tb_lds_bank_mem;
  logic clk = 0, rst_n = 0;
  logic l_req, l_we, l_rvalid, r_req, r_we, r_gnt, r_rvalid;
  logic [12:0] l_addr, r_addr; logic [63:0] l_wdata, l_rdata, r_wdata, r_rdata;
  int checks = 0, failures = 0, conflicts = 0;
  logic [63:0] model [8192];
  logic [63:0] l_exp, r_exp; logic l_pend, r_pend;

  lds_bank_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    l_req = 0; r_req = 0; l_we = 0; r_we = 0; l_addr = 0; r_addr = 0; l_wdata = 0; r_wdata = 0;
    l_pend = 0; r_pend = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // fill all words through alternating ports (different banks)
    for (int i = 0; i < 8192; i += 2) begin
      @(negedge clk);
      l_req = 1; l_we = 1; l_addr = 13'(i);   l_wdata = {$urandom, $urandom};
      r_req = 1; r_we = 1; r_addr = 13'(i+1); r_wdata = {$urandom, $urandom};
      model[i] = l_wdata; model[i+1] = r_wdata;
      #1 checks++; if (!r_gnt) failures++;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // check read data of the previous cycle
      if (l_pend) begin checks++; if (!l_rvalid || l_rdata !== l_exp) begin failures++; $display("local read"); end end
      if (r_pend) begin checks++; if (!r_rvalid || r_rdata !== r_exp) begin failures++; $display("remote read"); end end
      l_req = $urandom % 2; l_we = $urandom % 3 == 0; l_addr = 13'($urandom); l_wdata = {$urandom, $urandom};
      r_req = $urandom % 2; r_we = $urandom % 3 == 0;
      r_addr = (n % 4 == 0) ? {13'($urandom) & 13'h1fe0} | (l_addr & 13'h1f) : 13'($urandom);
      r_wdata = {$urandom, $urandom};
      #1;
      checks++;
      if (r_gnt !== (r_req && !(l_req && l_addr[4:0] == r_addr[4:0]))) begin failures++; $display("grant"); end
      if (r_req && !r_gnt) conflicts++;
      l_pend = l_req && !l_we; r_pend = r_gnt && !r_we;
      l_exp = model[l_addr]; r_exp = model[r_addr];
      if (l_req && l_we) model[l_addr] = l_wdata;
      if (r_gnt && r_we) model[r_addr] = r_wdata;
    end
    checks++; if (conflicts == 0) failures++;
    $display("bank conflicts seen: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
