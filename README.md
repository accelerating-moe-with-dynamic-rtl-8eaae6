# Target-aware in-switch Dispatch and Combine for Mixture-of-Experts

In a Mixture-of-Experts layer every token is sent to its top-k experts
(Dispatch), and the expert outputs are later summed back at the token's home
GPU (Combine). On a switch-connected node, ordinary unicast sends the same
token vector k times over the same GPU link, and Combine brings k partial
results back over it. This RTL moves both halves into the hardware path:

* a GPU sends **one** request per token that carries the token's list of
  target experts; the switch copies it once per destination GPU and trims the
  target list of each copy;
* for Combine the GPU sends **one** load-reduce request with the same list; the
  destination GPUs answer with one partial result per expert and the switch
  adds them up, so the home GPU receives a single sum;
* because which tokens reach which expert is only known at run time, each
  destination GPU places arriving tokens densely, in arrival order, in a
  per-expert buffer and remembers where each one went (the *algebraic to
  layout* mapping), so Combine can find the expert's output for that token
  again;
* small trackers turn "all tokens of a tile have arrived" and "all thread
  blocks of a tile are done" into readiness signals, so Dispatch, the two
  expert GEMMs and Combine can overlap tile by tile.

The top module `dysharp_node` holds, for each of `NGPU` GPUs, the source-side
queue, the hub memory manager, the token tracker and the readiness table, plus
one switch plane and a notification network. SMs, DRAM, the host runtime and
the kernel scheduler stay outside; their signals are ports.

## Addressing: algebraic index, layout index, virtual address

Each token has a global *algebraic index* (AIdx), its position in the
conceptual gathered token tensor. A request carries a 48-bit multimem address
`MAddr = MBase + AIdx*bsize + offset`; `bsize` is the bytes of one token vector.
The hub of the receiving GPU, for each of its target experts `e`:

1. computes `AIdx = (MAddr - MBase[stage]) / bsize` and the offset with a
   48-bit serial divider (bsize need not be a power of two; 50 cycles per packet);
2. looks `{e, AIdx}` up in the AL TLB (`dy_al_tlb`, a 512-entry fully
   associative CAM, FIFO replacement);
3. on a miss, reads the 4-byte AL Table entry `{Valid, LIdx[30:0]}` at
   `ALBase + 4*(e*ntoken + AIdx)` in DRAM;
4. in Dispatch, if the entry is not valid (first touch), takes the next free
   *layout index* `LIdx = Cnt[e]++`, writes the entry back and reports the
   allocation to the token tracker;
5. forms `VAddr = VBase[stage][e] + LIdx*bsize + offset` and writes the
   16-byte payload (store) or reads it and returns one partial response per
   target (load-reduce).

Dispatch and Combine share one mapping: the expert writes its output for the
token at layout block LIdx of the Combine buffer, so the same lookup finds it.
`cfg_clear` starts a new layer (counters and TLB cleared; the runtime zeroes
the AL Table).

## Request packets and flits

A request travels as 16-byte flits (`dy_flit_tx` / `dy_flit_rx`):

| flit | contents (MSB to LSB) |
|------|-----------------------|
| 0 | CRC 25b (zero) · header 83b · link header 20b (12b zero, 8b requester port) |
| 1..ceil(n/8) | eight 16-bit target expert IDs each, first target in the low bits |
| next (store only) | byte enables in bits 15:0 |
| last (store only) | the 16-byte payload |

The 83-bit header is `{type 3b, credit 4b, tag 12b, MAddr 48b, stage 1b,
#Target 15b}`; type 1 is store, 2 is load-reduce; stage 0 is Dispatch, 1 is
Combine. The split of the 19-bit type/credit/tag field, the encodings and
the use of the link-header bits for the requester port are this design's
choices. CRC and link framing are not generated. A packet can carry up to
`MAX_TARGETS = 32` targets (package constant, the largest top-k evaluated).

## Source side: the MultimemQ (`dy_mmq_lsu`)

The SMs hand over `dymultimem.st` / `dymultimem.ld_reduce` instructions
(data, multimem address, target count, target-list base). The 32-entry
circular queue accepts them, reads the target list from shared memory one
16-byte word at a time (up to 4 words), and issues complete packets in order.
A load-reduce takes a free tag from a 32-entry pending table that remembers
the destination register; the reduced response returns the value to the
register file through `wb_*`. The tag offered with a waiting load-reduce is
locked until the packet is taken. When the queue is full, `inst_ready` drops
and the SM stalls.

## The switch (`dy_switch`)

Per port: flit receiver, ingress queue (`IQ_DEPTH` packets), and `dy_route`.
Route decodes the set of destination ports `Target / EXPERTS_PER_GPU`, picks
the lowest port not yet served, and compacts that port's targets with a
prefix count, giving one trimmed replica per cycle. A round-robin arbiter per
output (`rr_arbiter`) moves replicas through the crossbar into a two-deep
egress queue and a flit transmitter.

Before a load-reduce enters Route, the Reduction Logic of its requesting port
(`dy_red_logic`, 4096 entries of 16 bytes = 64 KB) reserves the entry named
by the request tag with a count equal to the number of targets. Partial
responses from destination GPUs are steered by their destination field,
through a round-robin arbiter, to that Reduction Logic; each adds its data
lane-wise (four 32-bit lanes) and decrements the count; the last one sends the
sum to the source GPU. The add is unweighted: the gate weights are applied
by the expert kernel before Combine.

Note on the route example. The formula `OutPort = Target / experts_per_GPU`
is what the RTL implements. An illustrated example in the source material
places targets 9 and 12 on port 3 with 3 experts per GPU, which that formula
does not give for 12 (12/3 = 4); the testbench checks the formula.

## Readiness: token tracker and output-readiness table

`dy_token_tracker` (expert side) groups the layout blocks of an expert into
tiles of `TSIZE = 128` tokens. Its Tile Status table (1024 entries, direct
mapped on `Row*E + ExpID`) keeps `{Valid, ExpID, Row, TPtr, DAcc, TBCnt1,
TBCnt2}`:

* **Dispatch → GEMM-1**: each acknowledged store adds its bytes to DAcc; the
  row is GEMM-1 ready when DAcc equals `min(TSIZE, nactive - Row*TSIZE) *
  bsize` (the last tile of an expert is partial);
* **GEMM-1 → GEMM-2**: TBCnt1 counts finished GEMM-1 thread blocks of the
  row; ready at `cfg_ntb1`;
* **GEMM-2 → Combine**: when TBCnt2 reaches `cfg_ntb2` the tracker reads the
  tile's Token ID row from DRAM (`nToken`, then the token IDs, written at
  allocation time) and sends one notification per token to its source GPU
  `TID >> cfg_tok_log2`; then the entry is freed.

Readiness is polled through `q_exp/q_row → q_g1_ready/q_g2_ready`, and pulsed
on `g1_evt/g2_evt`. `dy_notify_net` is a crossbar with a round-robin arbiter
per destination. On the source side `dy_or_table` (1024 entries `{Valid, TID,
nReady}`) counts notifications; a token may be combined once nReady reaches
top-k; `cons_*` releases the entry.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `NGPU` | 32 | GPUs = switch ports |
| `EXPERTS_PER_GPU` | 8 | experts per GPU (256 experts on 32 GPUs) |
| `MMQ_DEPTH` | 32 | MultimemQ entries |
| `TLB_ENTRIES` | 512 | AL TLB entries |
| `TS_ENTRIES`, `OR_ENTRIES` | 1024 | tracker tables |
| `TSIZE` | 128 | tokens per synchronisation tile |
| `RED_BUF_BYTES` | 65536 | reduction buffer per port |
| `IQ_DEPTH` (switch) | 4 | ingress queue, packets |

`EXPERTS_PER_GPU` is a parameter, not a run-time value: configurations with 64
or 128 experts on 32 GPUs need it overridden (2 or 4).

## Departures and limits

* One switch plane with one packet queue per input replaces the nine switches
  and the sixteen 256-deep virtual channels per port of the evaluated node;
  there is no credit flow control. Responses move between blocks as structs.
* The Tile Status table stalls on a conflicting tile instead of spilling to
  DRAM.
* The hub has one memory access outstanding; the divider costs 50 cycles per
  packet.
* TS and TLB storage arrays are not reset; their valid bits are, and the data
  is read only where valid.
* The configuration (`cfg_*`) is shared by all GPUs except `cfg_nactive`.

## Verification

Every block has a self-checking testbench in `tb/` that compares against a
model in the testbench and prints `TB_RESULT checks=N failures=M`. The route
test checks the per-port trimming and the one-replica-per-cycle timing; the
switch test sends random multicast stores and load-reduces through flit
codecs on eight ports and checks every replica and every reduced sum; the hub
test checks allocation order, addresses, AL Table contents and TLB
statistics against a DRAM model.

`tb_dysharp_node` runs one MoE layer end to end on a small node (4 GPUs, 2
experts each, 4-token tiles, 4-entry queue, 16-entry TLB): top-3 gating,
Dispatch, the GEMM thread-block reports, notifications and Combine. It checks
the data in every expert buffer, the AL Table, readiness at each step and every
reduced value, and counts a failure for any mechanism that never occurred
(replication, reduction, TLB hit and miss, allocation, GEMM-1/GEMM-2 ready,
notification, output readiness, queue full, back-pressure).
`tb_dysharp_node_full` runs the same scenario with every parameter at its
default (32 GPUs, 8 experts each, 128-token tiles) and top-8 gating of 64
tokens per GPU: 4096 requests become about 30000 replicas, 16384 token
copies are placed and tracked, and 2048 reductions return, all checked.
This is the largest configuration simulated.

To run a test with Verilator:

```
verilator --binary --timing --assert rtl/dysharp_pkg.sv \
          $(ls rtl/*.sv | grep -v dysharp_pkg) \
          tb/tb_dysharp_node.sv --top-module tb_dysharp_node
./obj_dir/Vtb_dysharp_node
```

The package `rtl/dysharp_pkg.sv` must come first; every module imports it.
A unit test is run the same way with its own `tb/tb_<module>.sv` and top name.
The default-size test `tb_dysharp_node_full` needs several minutes to compile
(add `-j` to build in parallel) and under a minute to run.
