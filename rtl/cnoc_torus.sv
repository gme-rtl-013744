// cnoc_torus: the CU-side network on chip, a concentrated 2D torus.
//
// ROWS x COLS routers (3 x 5 = 15, one per Shader Engine) each serve CONC (8)
// compute units, 120 in all. Router (r, c) links X+ to (r, c+1 mod COLS), X- to
// (r, c-1), Y+ to (r+1 mod ROWS, c) and Y- to (r-1, c), so every router has the
// same degree and the wrap-around links close each row and column into a ring.
// CU i attaches to port i mod CONC of router i / CONC, and router
// s = r * COLS + c. Per CU: inj_* injects a packet (inj_ready means the
// router's input FIFO has room; a packet is taken in a cycle where inj_valid
// and inj_ready are both high), ej_* delivers one (ej_ready must not depend
// on ej_valid). The 3 x 5 concentrated torus follows the cNoC description.
module cnoc_torus
  import gme_pkg::*;
#(
  parameter int unsigned ROWS       = 3,
  parameter int unsigned COLS       = 5,
  parameter int unsigned CONC       = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NCU       = ROWS * COLS * CONC
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NCU-1:0] inj_valid,
  input  pkt_t           inj_pkt [NCU],
  output logic [NCU-1:0] inj_ready,
  output logic [NCU-1:0] ej_valid,
  output pkt_t           ej_pkt  [NCU],
  input  logic [NCU-1:0] ej_ready
);
  localparam int unsigned NP = CONC + 4;
  localparam int unsigned NR = ROWS * COLS;
  localparam int unsigned FW = $clog2(FIFO_DEPTH) + 1;
  localparam int unsigned XP = CONC, XM = CONC + 1, YP = CONC + 2, YM = CONC + 3;

  logic [NP-1:0] r_in_valid  [NR];
  pkt_t          r_in_pkt    [NR][NP];
  logic [FW-1:0] r_in_free   [NR][NP];
  logic [NP-1:0] r_out_valid [NR];
  pkt_t          r_out_pkt   [NR][NP];
  logic [FW-1:0] r_out_free  [NR][NP];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned S  = r * COLS + c;
      localparam int unsigned SXP = r * COLS + (c + 1) % COLS;
      localparam int unsigned SXM = r * COLS + (c + COLS - 1) % COLS;
      localparam int unsigned SYP = ((r + 1) % ROWS) * COLS + c;
      localparam int unsigned SYM = ((r + ROWS - 1) % ROWS) * COLS + c;

      noc_router #(.CONC(CONC), .ROWS(ROWS), .COLS(COLS), .MY_ROW(r), .MY_COL(c),
                   .FIFO_DEPTH(FIFO_DEPTH)) u_router (
        .clk, .rst_n,
        .in_valid(r_in_valid[S]), .in_pkt(r_in_pkt[S]), .in_free(r_in_free[S]),
        .out_valid(r_out_valid[S]), .out_pkt(r_out_pkt[S]), .out_free(r_out_free[S])
      );

      // torus links: what leaves X+ here enters X- of the east neighbour, etc.
      assign r_in_valid[S][XM] = r_out_valid[SXM][XP];
      assign r_in_pkt[S][XM]   = r_out_pkt[SXM][XP];
      assign r_in_valid[S][XP] = r_out_valid[SXP][XM];
      assign r_in_pkt[S][XP]   = r_out_pkt[SXP][XM];
      assign r_in_valid[S][YM] = r_out_valid[SYM][YP];
      assign r_in_pkt[S][YM]   = r_out_pkt[SYM][YP];
      assign r_in_valid[S][YP] = r_out_valid[SYP][YM];
      assign r_in_pkt[S][YP]   = r_out_pkt[SYP][YM];
      assign r_out_free[S][XP] = r_in_free[SXP][XM];
      assign r_out_free[S][XM] = r_in_free[SXM][XP];
      assign r_out_free[S][YP] = r_in_free[SYP][YM];
      assign r_out_free[S][YM] = r_in_free[SYM][YP];

      for (genvar k = 0; k < CONC; k++) begin : g_cu
        localparam int unsigned CU = S * CONC + k;
        assign r_in_valid[S][k] = inj_valid[CU] && inj_ready[CU];
        assign r_in_pkt[S][k]   = inj_pkt[CU];
        assign inj_ready[CU]    = (r_in_free[S][k] != '0);
        assign ej_valid[CU]     = r_out_valid[S][k];
        assign ej_pkt[CU]       = r_out_pkt[S][k];
        assign r_out_free[S][k] = ej_ready[CU] ? FW'(1) : '0;
      end
    end
  end
endmodule
