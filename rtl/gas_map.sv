// gas_map: global address space translation for the shared LDS.
//
// All CUs' LDSs together form one global address space of NUM_CU * LDS_WORDS
// 64-bit words. A global word address A is split into slot = A mod NUM_CU and
// off = A div NUM_CU; off is the word address inside the owning LDS, and the
// owner is cu = (slot + h) mod NUM_CU, where h = off[3:0] ^ off[7:4] hashes the
// low offset bits. Consecutive addresses therefore spread over all CUs, and
// the map is one-to-one because, for a fixed off, slot -> cu is a rotation.
// Purely combinational. That the translation uses a hash of the low address
// bits follows the GME description; the particular hash is this design's own.
module gas_map #(
  parameter int unsigned NUM_CU    = 120,
  parameter int unsigned LDS_WORDS = 8192,
  parameter int unsigned GADDR_W   = 20,
  localparam int unsigned CW       = 7,
  localparam int unsigned LW       = $clog2(LDS_WORDS)
) (
  input  logic [GADDR_W-1:0] gaddr,
  output logic [CW-1:0]      cu,
  output logic [LW-1:0]      laddr
);
  logic [GADDR_W-1:0] slot, off;
  logic [3:0]         h;
  logic [CW:0]        sum;
  assign slot  = gaddr % GADDR_W'(NUM_CU);
  assign off   = gaddr / GADDR_W'(NUM_CU);
  assign h     = off[3:0] ^ off[7:4];
  assign sum   = (CW+1)'(slot) + (CW+1)'(h);
  assign cu    = CW'(sum % (CW+1)'(NUM_CU));
  assign laddr = LW'(off);

  initial assert (NUM_CU <= 128 && NUM_CU * LDS_WORDS <= (1 << GADDR_W) && LDS_WORDS >= 256)
    else $error("gas_map: sizes out of range");
endmodule
