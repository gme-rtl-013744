// tb_gas_map: exhaustive test of the global LDS address map.
// Walks every global word address of the 120-CU, 64 KB-per-CU space and checks
// that the (CU, local address) pair is in range, that no pair is hit twice (the
// map is one-to-one), that the pair matches the formula computed here, and
// that 120 consecutive addresses land on 120 different CUs.
module tb_gas_map;
  localparam int NCU = 120, LW = 8192;
  logic [19:0] gaddr; logic [6:0] cu; logic [12:0] laddr;
  int checks = 0, failures = 0;
  bit seen [NCU*LW];
  bit cus [NCU];

  gas_map #(.NUM_CU(NCU), .LDS_WORDS(LW)) dut (.*);

  initial begin
    for (int a = 0; a < NCU*LW; a++) begin
      int slot, off, h, ecu;
      gaddr = 20'(a); #1;
      slot = a % NCU; off = a / NCU; h = (off & 15) ^ ((off >> 4) & 15);
      ecu = (slot + h) % NCU;
      checks++;
      if (int'(cu) != ecu || int'(laddr) != off || int'(cu) >= NCU || seen[int'(cu)*LW + int'(laddr)]) begin
        failures++;
        if (failures < 10) $display("addr %0d -> cu %0d laddr %0d", a, cu, laddr);
      end
      seen[int'(cu)*LW + int'(laddr)] = 1;
      if (a % NCU == 0) foreach (cus[i]) cus[i] = 0;
      if (cus[cu]) failures++;
      cus[cu] = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
