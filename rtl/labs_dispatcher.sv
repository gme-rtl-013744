// labs_dispatcher: command queue and block dispatcher driven by the LABS schedule.
//
// The locality-aware block scheduler decides at compile time which CU runs each
// FHE block, so that blocks sharing data sit close together on the CU-side
// network. This unit carries out that plan at run time. Schedule entries
// (block id, target CU, up to two producer blocks) are pushed into a QDEPTH
// command queue in schedule order. The head entry is launched - one-cycle
// launch pulse with CU and block id - when its target CU is idle and its
// producer blocks have completed; otherwise dispatch waits (a dependency stall
// or a CU-busy stall, each counted). A CU reports the end of its block with a
// done pulse, which marks that block complete in a MAX_BLOCKS scoreboard.
// Dispatch is in order, one launch per cycle at most. The queue, the
// any-CU placement and the dependency wait follow the LABS description; the
// entry format and in-order dispatch are this design's choices.
module labs_dispatcher
  import gme_pkg::*;
#(
  parameter int unsigned NUM_CU     = 120,
  parameter int unsigned QDEPTH     = 16,
  parameter int unsigned MAX_BLOCKS = 256,
  localparam int unsigned BW        = $clog2(MAX_BLOCKS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // schedule entries
  input  logic              cq_valid,
  output logic              cq_ready,
  input  logic [BW-1:0]     cq_blk,
  input  logic [CU_W-1:0]   cq_cu,
  input  logic [1:0]        cq_dep_v,
  input  logic [BW-1:0]     cq_dep [2],
  // launch to the CUs
  output logic              launch_valid,
  output logic [CU_W-1:0]   launch_cu,
  output logic [BW-1:0]     launch_blk,
  input  logic [NUM_CU-1:0] blk_done,
  // activity counters
  output logic [31:0]       n_launched,
  output logic [31:0]       n_dep_stall,
  output logic [31:0]       n_busy_stall
);
  typedef struct packed {
    logic [BW-1:0]   blk;
    logic [CU_W-1:0] cu;
    logic [1:0]      dep_v;
    logic [BW-1:0]   dep1;
    logic [BW-1:0]   dep0;
  } entry_t;
  localparam int unsigned EW = $bits(entry_t);

  entry_t head;
  logic   empty, pop;
  logic [$clog2(QDEPTH):0] free;
  entry_t wentry;
  assign wentry   = '{blk: cq_blk, cu: cq_cu, dep_v: cq_dep_v, dep1: cq_dep[1], dep0: cq_dep[0]};
  assign cq_ready = (free != '0);

  fifo_w #(.W(EW), .DEPTH(QDEPTH)) u_cq (
    .clk, .rst_n, .push(cq_valid && cq_ready), .wdata(wentry), .pop,
    .rdata(head), .empty, .free
  );

  logic [MAX_BLOCKS-1:0] complete;
  logic [NUM_CU-1:0]     busy;
  logic [BW-1:0]         running [NUM_CU];
  logic                  deps_ok, cu_ok;

  assign deps_ok = (!head.dep_v[0] || complete[head.dep0]) && (!head.dep_v[1] || complete[head.dep1]);
  assign cu_ok   = !busy[head.cu];
  assign pop     = !empty && deps_ok && cu_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      complete <= '0; busy <= '0; launch_valid <= 1'b0; launch_cu <= '0; launch_blk <= '0;
      n_launched <= '0; n_dep_stall <= '0; n_busy_stall <= '0;
      for (int i = 0; i < NUM_CU; i++) running[i] <= '0;
    end else begin
      launch_valid <= pop;
      for (int i = 0; i < NUM_CU; i++)
        if (blk_done[i] && busy[i]) begin
          busy[i] <= 1'b0;
          complete[running[i]] <= 1'b1;
        end
      if (pop) begin
        launch_cu  <= head.cu;
        launch_blk <= head.blk;
        busy[head.cu]    <= 1'b1;
        running[head.cu] <= head.blk;
        n_launched <= n_launched + 1;
      end else if (!empty) begin
        if (!deps_ok)     n_dep_stall  <= n_dep_stall + 1;
        else if (!cu_ok)  n_busy_stall <= n_busy_stall + 1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !empty |-> int'(head.cu) < NUM_CU);
endmodule
