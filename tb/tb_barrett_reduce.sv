// tb_barrett_reduce: self-checking test of the Barrett reducer.
// Random 54-bit moduli (top bit set), mu = floor(2^108 / q) and inputs below
// q^2 or below 2^108, streamed one per cycle; each result is compared with
// x mod q from the % operator, and its latency with STAGES.
module tb_barrett_reduce;
  localparam int K = 54, STAGES = 13;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic [2*K-1:0] x; logic [K-1:0] q; logic [K+1:0] mu;
  logic out_valid; logic [K-1:0] r;
  int checks = 0, failures = 0, cycle = 0;
  logic [K-1:0] expq [$]; int cycq [$];

  barrett_reduce #(.K(K), .STAGES(STAGES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid) begin expq.push_back(K'(x % (2*K)'(q))); cycq.push_back(cycle); end
    if (out_valid) begin
      logic [K-1:0] e; int cy;
      checks++;
      e = expq.pop_front(); cy = cycq.pop_front();
      if (r !== e || cycle - cy != STAGES) begin
        failures++; $display("mismatch r=%h exp=%h lat=%0d", r, e, cycle - cy);
      end
    end
  end

  initial begin
    in_valid = 0; x = 0; q = 0; mu = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic [127:0] qq, t;
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      qq = {74'b0, 1'b1, 21'($urandom), 32'($urandom)};
      if (i % 7 == 0) qq = (128'(1) << K) - 1;             // largest modulus
      if (i % 11 == 0) qq = (128'(1) << (K-1)) + 1;         // smallest modulus
      q  = K'(qq);
      mu = (K+2)'((128'(1) << (2*K)) / qq);
      t  = {$urandom, $urandom, $urandom, $urandom};
      case (i % 4)
        0: x = (2*K)'(t % (qq * qq));
        1: x = (2*K)'(qq * qq - 1);
        2: x = (2*K)'(t);                                   // any value below 2^108
        default: x = (2*K)'(t % qq);
      endcase
    end
    @(negedge clk) in_valid = 0;
    repeat (STAGES + 3) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
