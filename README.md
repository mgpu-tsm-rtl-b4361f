# A multi-GPU memory system with truly shared main memory

In today's multi-GPU machines every GPU owns its own DRAM, and a GPU that
needs data held by another GPU either copies it or reads it over a slow
off-chip link. The *truly shared memory* (TSM) organisation removes the
distinction between local and remote memory. All DRAM banks of all HBM stacks
form one physical memory, and every L2 cache bank of every GPU has its own
link to one central switch, which has its own link to every DRAM bank. Any
access from any GPU therefore takes the same two hops (L2 bank -> switch ->
DRAM bank), there is no NUMA effect, and a program can use one copy of its
data for all GPUs.

This repository holds synthesizable SystemVerilog for the memory side of
such a system: the L1 caches of each GPU, the crossbar that joins them to the
GPU's L2 banks, the L2 banks, the central switch, and the page-interleaving
address decoder. The compute units, the HBM stacks and the host CPU are not
part of the RTL; their connections are ports of the top module.

## The system at its default size

| Part | Per GPU | Whole system |
|---|---|---|
| GPUs | – | 4 |
| Compute units (CUs), 1 GHz | 32 | 128 |
| L1 vector cache, 16 KB 4-way | 32 (one per CU) | 128 |
| L1 scalar cache, 16 KB 4-way | 8 | 32 |
| L1 instruction cache, 32 KB 4-way | 8 | 32 |
| L2 cache bank, 256 KB 16-way | 8 | 32 |
| Central switch | – | 1: 32 L2-side ports, 64 DRAM-side ports |
| DRAM banks, 512 MB each | – | 64 (4 HBM stacks x 16) = 32 GB |

These counts and cache geometries are those of the published configuration.
The cache line (64 bytes), the CU access size (32-bit words with byte
enables) and everything about timing and protocol below are this design's
own choices, since the source describes the system at block level only.

```
  CU ports ──► L1 vector/scalar/instr. caches (48 per GPU)
                    │ line packets, dst = L2 bank of the page
                    ▼
              GPU crossbar (request + response)        ×4 GPUs
                    │
              L2 banks (8 per GPU) ──── one link each ────┐
                                                          ▼
                               central switch: request crossbar 32→64,
                                               response crossbar 64→32
                                                          │ one link per bank
                                                          ▼
                                        DRAM banks (64, outside the RTL)
```

## Where an address lives

Physical addresses are 35 bits (32 GB). Memory is allocated in 4 KB pages,
and consecutive pages go round-robin to neighbouring DRAM banks:

- DRAM bank (0..63) = page mod 64; HBM stack = bank / 16, bank in stack = bank mod 16
- byte address inside the bank = (page / 64) · 4096 + page offset (29 bits, 512 MB)
- L2 bank inside a GPU = page mod 8

With these numbers L2 bank *b* of every GPU serves exactly the eight DRAM
banks *b*, *b*+8, … *b*+56, i.e. 4 GB. Because the L2 bank is chosen by page,
an L2 bank removes the three bank-select bits of the page number before it
takes its set index; otherwise only one set in eight would ever be used. The
decoder (`addr_map`) uses `%` and `/`, so bank counts need not be powers of
two.

## Packets and the request/response rule

Every link in the memory system carries one `mem_pkt_t` (defined in
`tsm_pkg`): a command, source and destination port ids (8 bits each), the
line address, a 64-bit byte mask and a 512-bit line of data. There are four
commands: `CMD_RD` and `CMD_WR` are requests, `CMD_RD_RESP` (carrying the
line) and `CMD_WR_ACK` are responses. The one rule the whole design rests on:
**every request gets exactly one response, and the responder addresses it to
the request's `src`.** Crossbars route only by `dst`, so a response finds its
way back without any state in the network.

Who sets the ids:

- an L1 cache leaves them zero; the GPU stamps `src` = the L1's index
  (vector caches 0..31, scalar 32..39, instruction 40..47) and `dst` = the L2
  bank of the page;
- the switch stamps `src` = the global L2 port (GPU *g*, bank *b* → 8*g*+*b*)
  and `dst` = the DRAM bank of the page;
- a DRAM bank (outside the RTL) must answer with `dst` = the request's `src`.

All valid/ready interfaces move a packet when both are high at a rising
clock edge; a sender must hold its packet while it waits. Assertions in the
crossbar check both this and that every `dst` names an existing output.

## The central switch and its links

`tsm_switch` is two instances of the generic crossbar `xbar`: a request
crossbar from the 32 L2 ports to the 64 DRAM ports and a response crossbar
back. Each output has a round-robin arbiter and a one-packet output register,
so a packet crosses the switch in one cycle when its output is free, and a
sender that loses arbitration simply waits.

The link model is what gives the switch its bandwidth. A 32 GB/s
bidirectional link is taken as 16 GB/s in each direction, i.e. 16 bytes per
cycle at 1 GHz. A header-only packet (read request, write
acknowledgement) occupies an output for one cycle; a packet that carries a
line (write request, read response) occupies it for 64/16 = 4 cycles, during
which the output accepts nothing else. The aggregate L2-side bandwidth is
32 links x 32 GB/s = 1 TB/s. Inside a GPU the crossbar is not rate-limited
(one packet per port per cycle), because no bandwidth is given for it.

The source speaks of a "32-port switch" while also connecting every L2 bank
*and* every DRAM bank to it. This design follows the second statement (32 +
64 ports); the 32 ports and 1 TB/s match the L2 side.

## Caches

All caches are blocking (one request in flight), set-associative with a
per-set round-robin victim pointer, and use 64-byte lines.

**L1 (`l1_cache`)** serves one CU (or scalar / instruction port) with 32-bit
words. It is write-through and does not allocate on writes: a write updates
the line if it hits and is always sent on as a masked `CMD_WR`; the CU gets
its acknowledgement once L2 acknowledges. A read hit answers two cycles after
the request is taken (one cycle of lookup, one response cycle). A read miss
fetches the line with `CMD_RD`. The instruction-cache instance is read-only,
enforced by an assertion.

**L2 (`l2_cache`)** works the same way on lines: read hit → `CMD_RD_RESP`
two cycles after the request is taken; read miss → fetch through the switch,
fill, answer; write → merge into a hit line, pass on to DRAM, acknowledge
after DRAM acknowledges. The source specifies only L1 as write-through. This
design makes L2 write-through too, so that the shared DRAM always holds every
completed write and any GPU that misses reads the newest value.

**What this does not give you is coherence.** An L1 or L2 that already holds
a line keeps its copy when another CU or GPU writes that line. The source
leaves the coherence and consistency protocol to future work, and none is
built here. A reader that misses in its caches always sees the newest value,
because writes go through to DRAM; a reader that still holds the line keeps
its old copy until the line is evicted. Software that shares written data
must therefore make sure the readers do not hold it yet (the testbenches
read shared data from CUs and GPUs that have not touched the line).

## Timing summary (cycles of the 1 GHz clock)

| Event | Cycles |
|---|---|
| L1 read hit, request taken → response | 2 |
| L2 read hit, request taken → response at L2 | 2 |
| Crossbar or switch traversal, free output | 1 |
| Line packet on a switch link | 4 (16 B/cycle) |
| Header-only packet on a switch link | 1 |

DRAM latency depends on the bank model connected to the `mem_*` ports; the
testbenches use 5 to 20 cycles.

## Parts that are not in the RTL

- **Compute units.** The GPUs' CUs are an existing commercial design; their
  memory ports are `cu_*`, `sc_*` and `ic_*` of `tsm_top`, indexed
  `[gpu][port]`.
- **HBM DRAM banks and memory controllers.** Each bank is a `mem_*` port pair
  of `tsm_top`. `tb/hbm_bank_model.sv` is a behavioural bank (fixed latency,
  sparse storage) used by the testbenches.
- **Address translation.** The GPU configuration includes L1 TLBs (1 set,
  32-way, 48 per GPU) and an L2 TLB (32 sets, 16-way); they are not built.
  The CU ports take physical addresses.
- **Host CPU.** The CPU shares the memory, but its attachment to the switch is
  not specified, so the switch has no CPU port.
- **Multi-interposer scaling** (photonic and electrical links, I/O
  transceiver chiplets) is a future extension of the system, not part of it.

## Files

| File | Contents |
|---|---|
| `rtl/tsm_pkg.sv` | sizes, `mem_pkt_t`, `cu_req_t`, commands, link-cycle function |
| `rtl/addr_map.sv` | page interleaving: DRAM bank, stack, bank address, L2 bank |
| `rtl/rr_arb.sv` | round-robin arbiter |
| `rtl/xbar.sv` | packet crossbar with link serialisation |
| `rtl/l1_cache.sv` | L1 vector / scalar / instruction cache |
| `rtl/l2_cache.sv` | L2 cache bank |
| `rtl/gpu_node.sv` | one GPU: L1 caches, GPU crossbar, L2 banks |
| `rtl/tsm_switch.sv` | central switch |
| `rtl/tsm_top.sv` | the whole system |
| `tb/tb_*.sv` | self-checking testbenches, one per block |
| `tb/tb_pkg.sv`, `tb/hbm_bank_model.sv`, `tb/l1_tb_core.sv` | testbench helpers |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops; each has a
watchdog. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/tsm_pkg.sv tb/tb_pkg.sv rtl/*.sv tb/hbm_bank_model.sv tb/l1_tb_core.sv \
    tb/tb_tsm_top.sv --top-module tb_tsm_top
./obj_dir/Vtb_tsm_top
```

(List `rtl/tsm_pkg.sv` before the other files; replace the last file and the
top name for another testbench.) The simulator is two-state, so every state
that is read is reset; the large cache data arrays are not, because their
valid bits guard them.

| Testbench | What it checks |
|---|---|
| `tb_addr_map` | bank, stack, L2 bank and bank address against bit slices; consecutive pages in neighbouring banks |
| `tb_xbar` | random traffic with back-pressure (every packet once, in order, to its `dst`); round-robin order; 4-cycle spacing of line packets, 1-cycle spacing of header packets |
| `tb_l1_vector`, `tb_l1_scalar`, `tb_l1_inst` | miss/hit, 2-cycle hit latency, write-through with byte mask, no write-allocate, eviction after WAYS+1 lines, random traffic against a reference memory |
| `tb_l2_cache` | the same for an L2 bank, plus response routing (`dst` = `src`) and 16-way eviction |
| `tb_tsm_switch` | full 32x64 switch: every request reaches the bank that owns its page, responses return to the issuing port with the right data, link spacing on both directions |
| `tb_gpu_node` | routing of misses to the right L2 bank, L2 hits, sharing through L2 between CUs, scalar and instruction caches, parallel traffic |
| `tb_tsm_top` | the whole system at full size: a word written by one GPU is read by the others; counts write-through, L1 hit, L2 hit, DRAM reads, cross-GPU reads, L2 eviction, switch conflicts, link stalls, scalar and instruction reads, and fails if any never happened |

The full-size end-to-end test takes about five minutes to compile with
Verilator and under a minute to run.

## Evaluated workloads

The system was evaluated with twelve GPU benchmarks (aes, atax, bfs, bicg,
bs, conv, fir, fws, mm, mp, pr, relu) in a multi-GPU simulator. They are
programs for the compute units, which are outside this RTL, and their input
sizes are not given, so they cannot be run on it; the RTL covers the memory
system they would use.
