# HiMA memory-access engine in SystemVerilog

A Differentiable Neural Computer (DNC) couples a small LSTM controller with a large external
memory M of N rows by W columns, and every step it reads, writes and ranks that memory. The
memory work — content similarity, usage sorting, read-vector products — dominates the time,
and it grows with N. This design spreads the memory over Nt processing tiles (PTs), each
holding n = N/Nt consecutive rows, and puts a controller tile (CT) in the middle of a network
whose shape changes with the kernel being run. Its default size is the one used for bAbI:
N = 1024, W = 64, Nt = 16, so each PT owns 64 rows (16 KB of memory words).

The numbers are 32-bit Q16.16 fixed point throughout (`hima_pkg::fx_mul` truncates the
product back to 32 bits).

## Tiles and what each kernel does

| kernel (`cmd_e`) | where the work happens | network mode | result |
|---|---|---|---|
| `CMD_SORT` | PT: local sort of its n usage values; CT: merge of the Nt sorted lists; CT writes the global order back | star | `sort_done`; PT `su`/`si` memories hold global ranks |
| `CMD_READ_D` | PT: v_i = M_i^T w_i; CT: v = Σ α_i v_i | star | `rv`, `rv_valid` |
| `CMD_READ_RING` | each PT adds its v_i to the partial sum from the previous PT on the ring and passes it on | ring | `rv` = M^T w |
| `CMD_SIM` | PT: score_r = M[r,:]·k for each of its rows | star | 1024 `MSG_SIM` flits on `r_*` |

A PT (`processing_tile`) contains its memories (`pt_mem`: external-memory rows, linkage rows,
precedence, usage, write and read weightings, and the sorted usage `su` with row indices
`si`), a matrix engine (`mm_engine`: 64 processing elements feeding a reduction tree) and a
local sorter (`mdsa_sorter`). The local read streams one memory row per cycle into the PEs;
PE c runs multiply-accumulate `rf[0] += w[r]·M[r][c]`, so after n rows the 64 PEs hold the 64
elements of v_i, which are sent one flit each. Similarity uses the reduction tree instead:
64 products per row, summed by the tree, one score per row.

The CT (`controller_tile`) decodes an operation, broadcasts the command, and owns the global
parts: 16 usage banks (`usage_buffers`), the parallel merge sorter (`pms`) and the weighted
read-vector accumulator (`rdvec_merge`). It is also the host's door: a flit given on `h_*` is
injected at the CT (in the mode chosen on `host_mode`, or to all PTs with `h_bcast`), and
flits that reach the CT but are not for it (read responses, similarity scores) come out on
`r_*`. This is how memories are loaded and inspected.

## The two-stage usage sort

Sorting N usage values on one unit costs about N log N cycles. Here it is split:

1. **Local.** Each PT views its n = 64 values as an 8 × 8 grid (P = ⌈√n⌉) in a register
   file and sorts whole lines with an 8-input bitonic sorter (`dpbs`) that can sort either up
   or down. Lines go in one per cycle, and come out D cycles later, where D = ⌈S/2⌉ and
   S = log2P·(log2P+1)/2 compare stages (D = 3 for P = 8, 5 for P = 16). The line schedule
   is shearsort: 2·log2P + 1 phases, alternating row phases (rows in snake order, the last
   row phase all ascending) and column phases. Each phase costs P + D cycles, so the local
   sort of 64 values takes 7 × (8 + 3) = 77 cycles.
2. **Global.** Each PT streams its sorted list to the CT, which stores it in its own bank.
   The merge sorter looks at the next 16 entries of every bank (a 16 × 16 window) and gives
   each entry its rank among all 256. The 16 with rank < 16 are that step's outputs; each
   bank's pointer moves past the entries it gave. After N/Nt = 64 steps all 1024 values are
   out in order. Entry s of step t (global rank 16t + s) is written to slot t of PT s.

Ties are broken by the row index, then by bank number, so the result is a stable order of
(usage, row). A full sort at the default size took 2201 cycles in simulation; most of it is
the write-back of 1024 flits through the CT's single injection port.

## The reconfigurable network

The 18 routers (`noc_router`) sit on a 3 × 6 grid; the CT is at (x = 2, y = 1), the PTs
fill the other positions in row-major order, and position (5, 2) has a router but no tile.
Each router has eight neighbour ports (N, NE, E, SE, S, SW, W, NW) and a local port. Every
port has an on/off switch driven by the mode, and a route table gives the output for each
destination:

* **star** – only links on the shortest path to or from the CT are on; routes go diagonally
  first, then straight. Commands, usage lists, read vectors and scores use it.
* **ring** – a snake through the grid: left to right on row 0, down at the end, right to left
  on row 1, and so on, using E/W links and the N/S links at the row ends. The ring read walks
  it from the first PT to the last, which hands the total to the CT.
* **diagonal** – only NE/SW links are on; tiles on one anti-diagonal talk to each other. The
  CT reaches the PTs at (3, 0) and (1, 2) this way.
* **full** – all eight directions, diagonal-first minimal routing. Used for loading memories.

An input FIFO is four flits deep. A flit that arrives at an empty FIFO may cross the router
in the same cycle (feed-through) if it wins its output; otherwise it is stored. Each output
picks among its requesters round-robin. `bypass_evt` and `stall_evt` report feed-through
and blocked flits per router. A flit offered on a route that is off in the current mode is an
assertion error, so mode changes must happen while the network is empty (the CT does this
by switching only between operations).

## Processing elements, reduction tree and exponential

A PE (`pe`) has a 64-entry register file and five operations: pass `a`, `a+b`, `a·b`,
`a·b + rf[ra]`, `(a + rf[ra])·b`; its result is registered and may also be written to
`rf[wa]`. The tree (`cpt`) has log2 64 = 6 levels of cells; each level adds, multiplies,
passes its left input, or applies the exponential unit, with one register per level.

The exponential (`sfu_exp`) used for softmax is a table of 16 straight-line pieces over
[−8, 0), each 0.5 wide: exp(x) ≈ SLOPE[j]·x + ICEPT[j] with j = ⌊(x + 8)/0.5⌋, where each piece
is the chord through exp at its two ends (SLOPE[j] = (e^{x1} − e^{x0})/0.5,
ICEPT[j] = e^{x0} − SLOPE[j]·x0, both in Q16.16). Inputs ≥ 0 give 1.0 and inputs below −8
give 0; softmax inputs are meant to be shifted by their maximum first. One multiply, one add.

## Sizes

| quantity | formula | default |
|---|---|---|
| rows per PT n | N / Nt | 1024 / 16 = 64 |
| external memory per PT | n · W · 4 B | 64 · 64 · 4 = 16 KB |
| linkage memory per PT | n · N · 4 B | 64 · 1024 · 4 = 256 KiB (262 KB) |
| each state vector per PT | n · 4 B | 256 B |
| sorter grid P | ⌈√n⌉ | 8 |
| local sort cycles | (2·log2P + 1) · (P + D) | 7 · 11 = 77 |
| merge steps | n | 64 |

## Where this departs from the published design

* The local sort schedule: the published sorter finishes in 6 phases with a multi-dimensional
  algorithm whose steps are not spelled out; shearsort needs 7 phases for P = 8 (9 for P = 16).
* The global merge: a one-cycle rank-based merge with a registered output stands in for a
  7-stage pipelined merge network. It has the same throughput (Nt outputs per step) but a
  long combinational path (Nt^4 comparisons).
* The CT injects one flit per cycle, so write-back of each merge step takes Nt cycles.
* Grid size and position of the CT, the ring order, routing rule, FIFO depth, arbitration,
  flit format and message codes, and R = 4 read heads, are this design's choices.
* Only four kernels are sequenced (sort, DNC-D read, ring read, similarity). The memories for
  linkage, precedence and weightings exist and can be written and read over the network, but
  the linkage update, allocation, forward-backward and write kernels, the submatrix and
  partial-sum logic for the transposed dataflow, and the LSTM are not built. The LSTM's
  requests enter through the `op_*` and `h_*` ports.

## Flit format and ports

`flit_t` is `{dst_x[3], dst_y[2], src[5], msg[4], addr[16], data[32]}`. `src` is the PT
number, or 16 for the CT/host. `msg` is one of `msg_e` (memory writes `MSG_WR_*` with the
target in the message, `MSG_RD_REQ` with the memory selector in `data`, `MSG_RD_RSP`,
`MSG_CMD`, usage lists, read vectors, partial sums, key words and scores).

Top-level handshake: hold `op_valid` with `op`, `op_head` until a cycle where `op_ready` is
high; `alpha` must be stable until `rv_valid`. `h_valid`/`h_ready` is a valid/ready pair;
`r_valid` is a one-cycle pulse per flit (the port is never back-pressured). `host_mode` may
only change while the network is idle.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=… failures=…`. For example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/hima_pkg.sv \
        tb/tb_pms.sv --top-module tb_pms
    ./obj_dir/Vtb_pms

`tb_hima_top` runs the whole engine at its default size: it loads all 65,536 memory words,
the read weighting and usage over the network in full mode, reads two words in diagonal
mode, sorts, runs both reads and the similarity, and compares everything with a model in
the testbench. It also counts cycles spent in each network mode, feed-through and stall
events, and fails if any of them never happened. It compiles slowly (several minutes) because
of the size of the merge sorter and the 16 tiles.
