// noc_router: one router of the concentrated 2D torus (one per Shader Engine).
//
// Ports 0..CONC-1 connect the Shader Engine's CUs; ports CONC..CONC+3 are the
// torus links X+ (to column+1), X- (to column-1), Y+ (to row+1), Y- (to row-1).
// Packets are single flits (gme_pkg::pkt_t). Every input has a FIFO_DEPTH
// FIFO; its head is routed X first, then Y, taking the shorter way round each
// ring, then ejected to CU port dst mod CONC. Each output picks one requesting
// input per cycle, round robin. Flow control is by free-slot counts: the
// router sends on output o only if out_free[o] (free slots of the FIFO behind
// the link, or 1/0 for a CU that can/cannot take a packet) is at least 1 for
// a packet that stays in its ring and at least 2 for one that enters a ring
// (from a CU or by turning from X to Y). This bubble rule keeps one slot free
// in every ring, so the torus cannot deadlock. The router one per Shader
// Engine, its 8 CU ports and the torus follow the cNoC description; routing,
// buffering and flow control are this design's choices.
// Timing: a packet at the head of an input FIFO crosses the router in the
// cycle it wins arbitration and sits in the next FIFO one cycle later.
// out_free must not depend on out_valid in the same cycle.
module noc_router
  import gme_pkg::*;
#(
  parameter int unsigned CONC       = 8,
  parameter int unsigned ROWS       = 3,
  parameter int unsigned COLS       = 5,
  parameter int unsigned MY_ROW     = 0,
  parameter int unsigned MY_COL     = 0,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NP        = CONC + 4,
  localparam int unsigned FW        = $clog2(FIFO_DEPTH) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NP-1:0] in_valid,
  input  pkt_t          in_pkt   [NP],
  output logic [FW-1:0] in_free  [NP],
  output logic [NP-1:0] out_valid,
  output pkt_t          out_pkt  [NP],
  input  logic [FW-1:0] out_free [NP]
);
  localparam int unsigned XP = CONC, XM = CONC + 1, YP = CONC + 2, YM = CONC + 3;
  localparam int unsigned PW = $bits(pkt_t);
  localparam int unsigned SW = $clog2(NP);

  logic [NP-1:0] empty, pop;
  logic [PW-1:0] head [NP];
  logic [SW-1:0] want [NP];

  for (genvar p = 0; p < NP; p++) begin : g_in
    fifo_w #(.W(PW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(in_valid[p]), .wdata(in_pkt[p]), .pop(pop[p]),
      .rdata(head[p]), .empty(empty[p]), .free(in_free[p])
    );
  end

  // route computation
  function automatic logic [SW-1:0] route(input logic [CU_W-1:0] dst);
    int unsigned se, r, c, dx, dy;
    se = dst / CONC;
    r  = se / COLS;
    c  = se % COLS;
    dx = (c + COLS - MY_COL) % COLS;
    dy = (r + ROWS - MY_ROW) % ROWS;
    if (dx != 0)      return SW'((dx <= COLS / 2) ? XP : XM);
    else if (dy != 0) return SW'((dy <= ROWS / 2) ? YP : YM);
    else              return SW'(dst % CONC);
  endfunction

  // credit needed: 1 to stay in the same ring direction, 2 to enter a ring
  function automatic logic [1:0] need(input int unsigned ip, input int unsigned op);
    if (op < CONC) return 2'd1;
    if ((ip == XM && op == XP) || (ip == XP && op == XM) ||
        (ip == YM && op == YP) || (ip == YP && op == YM)) return 2'd1;
    return 2'd2;
  endfunction

  for (genvar p = 0; p < NP; p++) begin : g_route
    pkt_t hp;
    assign hp      = head[p];
    assign want[p] = route(hp.dst);
  end

  // per-output round-robin arbitration
  logic [SW-1:0] rr [NP];
  logic [SW-1:0] win [NP];
  logic [NP-1:0] grant_any;

  always_comb begin
    pop = '0;
    for (int o = 0; o < NP; o++) begin
      grant_any[o] = 1'b0;
      win[o]       = '0;
      for (int k = 0; k < NP; k++) begin
        int unsigned i;
        i = (int'(rr[o]) + k) % NP;
        if (!grant_any[o] && !empty[i] && int'(want[i]) == o &&
            out_free[o] >= FW'(need(i, o))) begin
          grant_any[o] = 1'b1;
          win[o]       = SW'(i);
        end
      end
      if (grant_any[o]) pop[win[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < NP; o++)
        if (grant_any[o]) rr[o] <= (win[o] == SW'(NP - 1)) ? '0 : win[o] + 1'b1;
    end
  end

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      out_valid[o] = grant_any[o];
      out_pkt[o]   = head[win[o]];
    end
  end

  initial assert (ROWS >= 2 && COLS >= 2 && FIFO_DEPTH >= 2 && MY_ROW < ROWS && MY_COL < COLS)
    else $error("noc_router: bad parameters");
endmodule
