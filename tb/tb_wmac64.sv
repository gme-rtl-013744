// tb_wmac64: self-checking test of the pipelined 64-bit multiply-accumulate.
// Streams random operands, one per cycle with random bubbles, and compares each
// result, and the cycle it appears in, with a + b*c computed by the testbench.
module tb_wmac64;
  localparam int STAGES = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic [63:0] a, b; logic [127:0] c;
  logic out_valid; logic [127:0] p;
  int checks = 0, failures = 0;
  logic [127:0] expq [$];
  int           cycq [$];
  int cycle = 0;

  wmac64 #(.STAGES(STAGES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid) begin expq.push_back(128'(a) * 128'(b) + c); cycq.push_back(cycle); end
    if (out_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        logic [127:0] e; int cy;
        e = expq.pop_front(); cy = cycq.pop_front();
        if (p !== e || cycle - cy != STAGES) begin
          failures++; $display("mismatch p=%h exp=%h lat=%0d", p, e, cycle - cy);
        end
      end
    end
  end

  initial begin
    in_valid = 0; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      c = (i % 3 == 0) ? '0 : {$urandom, $urandom, $urandom, $urandom};
      if (i < 4) begin a = '1; b = '1; c = '1; end
    end
    @(negedge clk) in_valid = 0;
    repeat (STAGES + 3) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
