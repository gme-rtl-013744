// lds_bank_mem: the Local Data Share of one compute unit, 32 banks of 64-bit words.
//
// 64 KB is stored as BANKS banks; word address a lives in bank a mod BANKS at
// row a / BANKS. Two requesters share it: the local port (the CU's own LDS
// unit) and the remote port (requests that arrived over the CU-side network).
// Each port moves one word per cycle. If both address the same bank in a cycle
// the local port wins and the remote port sees gnt low and must retry (a bank
// conflict stall); otherwise both are served. Reads return data one cycle
// after the grant, with rvalid. The 64 KB size and 32 banks are those of the
// GPU's LDS; word width, arbitration and latency are this design's choices.
module lds_bank_mem #(
  parameter int unsigned BYTES = 65536,
  parameter int unsigned BANKS = 32,
  parameter int unsigned W     = 64,
  localparam int unsigned WORDS = BYTES / (W / 8),
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned BW    = $clog2(BANKS),
  localparam int unsigned ROWS  = WORDS / BANKS
) (
  input  logic          clk,
  input  logic          rst_n,
  // local port
  input  logic          l_req,
  input  logic          l_we,
  input  logic [AW-1:0] l_addr,
  input  logic [W-1:0]  l_wdata,
  output logic          l_rvalid,
  output logic [W-1:0]  l_rdata,
  // remote port
  input  logic          r_req,
  input  logic          r_we,
  input  logic [AW-1:0] r_addr,
  input  logic [W-1:0]  r_wdata,
  output logic          r_gnt,
  output logic          r_rvalid,
  output logic [W-1:0]  r_rdata
);
  logic [W-1:0] mem [BANKS][ROWS];

  logic [BW-1:0]    l_bank, r_bank;
  logic [AW-BW-1:0] l_row,  r_row;
  assign l_bank = l_addr[BW-1:0];
  assign r_bank = r_addr[BW-1:0];
  assign l_row  = l_addr[AW-1:BW];
  assign r_row  = r_addr[AW-1:BW];
  assign r_gnt  = r_req && !(l_req && l_bank == r_bank);

  always_ff @(posedge clk) begin
    if (l_req) begin
      if (l_we) mem[l_bank][l_row] <= l_wdata;
      else      l_rdata <= mem[l_bank][l_row];
    end
    if (r_gnt) begin
      if (r_we) mem[r_bank][r_row] <= r_wdata;
      else      r_rdata <= mem[r_bank][r_row];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin l_rvalid <= 1'b0; r_rvalid <= 1'b0; end
    else begin
      l_rvalid <= l_req && !l_we;
      r_rvalid <= r_gnt && !r_we;
    end
  end

  initial assert (WORDS % BANKS == 0 && (1 << AW) == WORDS) else $error("lds_bank_mem: bad size");
endmodule
