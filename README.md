# GME: GPU microarchitecture extensions for homomorphic encryption — RTL

Fully homomorphic encryption (FHE, here the CKKS scheme) computes on encrypted
data. Its ciphertexts are pairs of polynomials of degree 2^16 whose 1728-bit
coefficients are split, by the residue number system (RNS), into limbs of
54-bit residues. Almost all the work is modular arithmetic on long vectors of
64-bit words, and almost all the time of a GPU implementation goes to moving
those vectors between kernels through off-chip memory.

The GME design attacks both halves on an AMD CDNA-class GPU (MI100: 120
compute units in 15 Shader Engines of 8):

* **MOD / WMAC** — the vector ALUs get native 64-bit modular reduction,
  modular addition and modular multiplication (Barrett reduction) and a
  pipelined 64-bit multiply-accumulate, instead of emulating them with many
  32-bit instructions.
* **cNoC** — the 64 KB Local Data Share (LDS) scratchpads of all CUs become
  one global address space, reached over an on-chip network: a concentrated
  2D torus with one router per Shader Engine. Data a kernel leaves in LDS can
  be consumed by the next kernel on any CU, without a round trip to memory.
  Hardware barriers at Shader-Engine and GPU granularity order producers and
  consumers.
* **LABS** — a locality-aware block scheduler: the FHE program is a graph of
  blocks; at compile time it is partitioned and mapped onto CUs (graph
  partitioning plus simulated annealing), and the dispatcher launches every
  block on the CU the mapping names, once its producers are done.

This RTL builds the hardware parts of that design: the MOD/WMAC lanes, the
SIMD unit around them, the banked LDS, the global address mapping, the torus
routers and network, the barrier unit, the LABS dispatcher, the per-CU glue
that joins them, and a top level with all 120 CUs. The existing GPU around it
(command processor, instruction front ends, caches, HBM) is not rebuilt; its
connections are ports of the top.

## Arithmetic: the MOD/WMAC lane

Each of the 16 lanes of a SIMD is a `mod_lane`: a 64-bit integer datapath with
three exits.

| op | result | lane stages | SIMD latency |
|---|---|---|---|
| `OP_MOD_ADD` | (a + b) mod q | 3 | 7 |
| `OP_MOD_RED` | a mod q | 13 | 17 |
| `OP_MOD_MUL` | (a · b) mod q | 6 + 13 | 23 |
| `OP_MUL_LO` | low 64 bits of a · b | 6 | 10 |
| `OP_MAC` | vd + a · b (low 64 bits) | 6 | 10 |

The SIMD latencies of the three modular ops are the cycle counts measured for
the combined MOD+WMAC configuration of the design (17, 7, 23). A 64-thread
wavefront needs four 16-lane issue cycles, so the lane pipelines are sized
as latency − 4. How those cycles divide into stages inside a lane is not
known; here all of them sit as registers after the arithmetic.

**Modular addition** assumes reduced operands: the 65-bit sum is compared with
q once and q is subtracted if the sum is not below it.

**Barrett reduction** (`barrett_reduce`) takes a product x < q² of a K-bit
modulus q (K = 54, 2^(K−1) < q < 2^K) and the constant μ = ⌊2^(2K)/q⌋:

    q̂ = ⌊x · μ / 2^(2K)⌋,  r = x − q̂ · q  (0 ≤ r < 2q),  r ≥ q ? r − q : r

Only one comparison and subtraction are needed because q̂ underestimates
⌊x/q⌋ by at most one. μ travels with q in every instruction (a scalar
operand), since moduli are compile-time constants of the FHE program. The
remainder r − q̂q is computed on K + 2 bits only, which is exact because the
true value is below 2q.

**WMAC** (`wmac64`) is a 64 × 64 → 128-bit multiplier with a 128-bit addend,
registered at the front and carried through a shift pipeline. `OP_MOD_MUL`
feeds its product into the Barrett unit; `OP_MUL_LO` and `OP_MAC` use it
directly.

## The SIMD unit

`simd_unit` holds a register file of 64 vector registers of 64 threads × 64
bits (32 KB: the GPU's 15 MB register file spread over 120 CUs × 4 SIMDs) and
16 lanes. An accepted instruction (`vinstr_t`: op, vd, vs0, vs1, q, μ) issues
threads 0–15, 16–31, 32–47, 48–63 on four consecutive cycles; results come
back in the same order and are written to vd, and `done` pulses one cycle
after the last write. One instruction is in flight at a time, which makes the
table above exact, cycle for cycle. For `OP_MAC` the old value of vd is the
addend. Two auxiliary write ports and one combinational read port give the
LDS unit per-thread access while the SIMD is idle.

## Global LDS space

Every CU owns 64 KB of LDS in 32 banks of 64-bit words (`lds_bank_mem`, 8192
words; bank = word address mod 32). The 120 LDS arrays together form one
global space of 983,040 words (7.5 MB), addressed by a 20-bit word address A.

`gas_map` spreads consecutive words over all CUs and breaks up strides with
a small hash:

    slot = A mod 120,  off = A div 120,  h = off[3:0] xor off[7:4]
    owner CU = (slot + h) mod 120,   local word address = off

The mapping is a bijection (the testbench checks all 983,040 addresses), and
a wavefront reading 64 consecutive words touches 64 different CUs'
neighbourhoods rather than hammering one. The exact hash is this design's
choice; the scheme it follows is a global address space decided by the lower
address bits with a hash in front.

Each LDS has two ports. The local port belongs to its own CU and always wins;
the remote port serves requests that arrived over the network and is refused
for a cycle when it wants the same bank as a local access — a *bank
conflict*, counted in `n_conflict`. Reads return one cycle after the request.

## cNoC: the concentrated torus

`noc_router` has CONC = 8 CU ports and four torus ports (X+, X−, Y+, Y−);
`cnoc_torus` joins ROWS × COLS = 3 × 5 routers into a torus, router (r, c)
serving CUs 8·(5r + c) … 8·(5r + c) + 7. Packets (`pkt_t`, 98 bits) are one
flit: destination and source CU, read/write, a 6-bit tag (the thread), a
13-bit LDS word address and 64 bits of data.

* **Routing** is dimension order: X first, then Y, each time the shorter way
  round the ring (ties go to +).
* **Buffering** is an input FIFO of FIFO_DEPTH = 4 per port; a router sends on
  an output only if the FIFO behind it has enough free slots, reported back as
  a free-slot count (a credit) that does not depend on this cycle's traffic.
* **Deadlock freedom** uses bubble flow control: a packet staying in the same
  ring direction needs one free slot, a packet entering a ring (from a CU or
  turning from X to Y) needs two. No ring can then fill completely, so the
  wrap-around links cannot close a cycle of full buffers.
* **Arbitration** is round-robin per output.

Requests and responses travel on two separate copies of the torus, so a CU
that cannot accept more requests never blocks the responses that would free
it. The network takes a packet in any cycle where `inj_valid` and `inj_ready`
are both high.

## The CU and its LDS access unit

`gme_cu` joins one SIMD, one LDS and a small sequencer that executes
`OP_DS_READ`, `OP_DS_WRITE` and `OP_BARRIER`.

A `ds_read vd, base` or `ds_write vs0, base` moves a whole wavefront: thread t
uses global word base + t. The sequencer walks t = 0 … 63, one thread per
cycle: `gas_map` names the owner; if it is this CU the local LDS port is used
(`n_local`), otherwise a request packet tagged with t goes into the request
network (`n_remote`). Responses (read data, or a write acknowledgement) come
back on the response network in any order and are written to thread `tag` of
vd. The instruction is done when all 64 threads have been issued and nothing
is outstanding; up to 64 requests may be outstanding.

In parallel, the CU serves requests from others: a one-entry buffer takes a
request from the network, tries the LDS remote port until it is granted, and
places the answer in a response register for the response network
(`n_served`).

`OP_BARRIER` raises `bar_arrive` with a scope (`SCOPE_SE` or `SCOPE_GLOBAL`)
and waits for `bar_release`. `barrier_unit` keeps the arrivals per scope;
when every member CU of a Shader Engine (or of the whole GPU) has arrived,
each of them gets a one-cycle release pulse in the next cycle. `bar_member`
says which CUs take part, so a barrier can cover only the CUs a program uses.

Only one of the four SIMDs of a real CU is modelled; the instruction front
end that would feed the four is outside the design.

## LABS: block dispatch

The compile-time half of LABS — partitioning the block graph and annealing
the block-to-CU mapping — is software. Its output reaches the hardware as a
command queue: `cq_*` carries one block per entry (block id, target CU, up to
two producer blocks). `labs_dispatcher` keeps the entries in order
(QDEPTH = 16) and launches the head (`launch_valid/cu/blk`) when both
producers have completed and the target CU is idle. A head that waits counts
a dependency stall (`n_dep_stall`) or, if its producers are done, a busy
stall (`n_busy_stall`). `blk_done[cu]` reports the end of a CU's block; the
dispatcher marks that block complete (MAX_BLOCKS = 256 ids).

Because the cNoC makes every LDS visible to every CU, the target CU is a
locality choice rather than a correctness requirement: a block can run
anywhere and still find its inputs.

## Top level

`gme_top` instantiates 120 `gme_cu`, the request and response tori, the
barrier unit and the dispatcher. Its ports are the places where the existing
GPU attaches:

| port | meaning |
|---|---|
| `instr_valid/instr_ready/instr[cu]`, `done[cu]` | one decoded vector instruction per CU from the front end |
| `bar_member` | CUs taking part in barriers |
| `cq_valid/cq_ready/cq_blk/cq_cu/cq_dep_v/cq_dep` | LABS command queue |
| `launch_valid/launch_cu/launch_blk`, `blk_done` | block launch to, and completion from, the front end |
| `n_local, n_remote, n_served, n_conflict [cu]` | LDS traffic counters per CU |
| `n_launched, n_dep_stall, n_busy_stall` | dispatcher counters |

Parameters and their defaults: ROWS 3, COLS 5, CONC 8 (120 CUs), LDS_BYTES
65536, NUM_VREGS 64, FIFO_DEPTH 4, QDEPTH 16, MAX_BLOCKS 256. The modulus
width is 54 bits (`QBITS` in `gme_pkg`), the machine word 64.

## Where this RTL departs from, or adds to, the paper's description

* The lane stage split, router micro-architecture, packet format, hash
  function, barrier interface, command-queue format, and the one-instruction-
  at-a-time SIMD are choices of this design; the paper gives their function,
  not their insides.
* Two sizes of total LDS appear in the source description: 7.5 MB (the GPU's
  120 × 64 KB) and 15.5 MB in a design-space study. This RTL uses 64 KB per
  CU (7.5 MB).
* One SIMD per CU is built instead of four.
* The dispatcher runs one block per CU at a time. A stock GPU scheduler may
  oversubscribe a CU with several blocks thanks to its large register file;
  that is not modelled, and a block aimed at a busy CU waits (busy stall).
* Polynomial kernels (NTT, key switching, rescale) are programs for this
  hardware and are not part of the RTL. A full ciphertext (28.3 MB) does not
  fit in the 7.5 MB global LDS; the real system streams limbs (0.44 MB each)
  from HBM, which is not modelled.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/gme_pkg.sv tb/tb_gme_top.sv \
              --top-module tb_gme_top -o sim && obj_dir/sim

Highlights:

* `tb_simd_unit` checks every result and that the latencies are 7, 17, 23 and
  10 cycles.
* `tb_gas_map` checks the whole address space for a bijection.
* `tb_cnoc_torus` sends thousands of random packets through the full 120-CU
  torus and checks every delivery; `tb_noc_router` checks the bubble rule.
* `tb_gme_top` runs the whole design at 2 × 2 Shader Engines of 2 CUs: LABS
  launches one block per CU, each block loads two wavefronts from the global
  LDS space, runs all five arithmetic ops, stores, meets the others at a
  global barrier, reads what a neighbour wrote, and ends at a Shader-Engine
  barrier; a second wave of blocks depends on the first. Every stored word is
  compared with a reference, and local and remote accesses, bank conflicts,
  both barrier scopes, both dispatcher stalls and each op must occur.
* Size limits of simulation: the top at its default size (120 CUs) turns
  into over 500 MB of generated C++ and did not finish building within ten
  minutes, so no full-size end-to-end run exists. The largest end-to-end run
  is the full 3 × 5 torus with 2 CUs per router (30 CUs, set ROWS/COLS/CONC
  to 3/5/2 in `tb_gme_top`; about seven minutes to build). There all 5,760
  stored-word checks passed and every mechanism occurred except the busy
  stall, which that block schedule did not provoke. The last block was then
  aimed at the CU that had just been given the block before it; that version
  was run at 8 CUs only. The full 120-CU network alone is exercised by
  `tb_cnoc_torus`, and the 120-CU barrier by `tb_barrier_unit`.

The simulator has two states; testbenches set or reset everything they read.
