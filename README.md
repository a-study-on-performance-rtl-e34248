# A stripped 2-bit MLC STT-RAM last-level cache

## The idea

A 2-bit multi-level-cell (MLC) STT-RAM cell stacks two magnetic tunnel
junctions in series. One of them, the *hard domain*, needs a large current to
flip and carries the most significant bit. The other, the *soft domain*,
flips at a small current and carries the least significant bit. The two
domains behave very differently:

* **Reading the hard bit** is a single sense step. **Reading the soft bit**
  needs a second step, because the sense amplifier must first know the hard
  bit to pick the right reference.
* **Writing the soft bit** is a single small-current pulse. **Writing the hard
  bit** uses a large current that also drags the soft domain to the same
  value. The soft bit is lost and must be read beforehand and written back.

An MLC cache that stores both bits of a cell in the same cache line pays for
both steps on every access. This design uses *stripped* mapping instead. A
cell holds bit *k* of two different lines. The hard domains of a row of cells
form one line, which is **fast to read and slow to write (FRHE)**. The soft
domains form a second line, which is **slow to read and fast to write
(SRLE)**. The two lines are a *line pair*.

Two policies keep the right data in the right half of the cell:

* **Associativity on demand.** A line pair can run in SLC mode. The hard
  domains are then parked at 0, and the pair holds one line in its soft
  domains. That line reads in one step and writes in one step. Each set
  starts at 8 SLC pairs (8 ways). It converts pairs to MLC (2 ways each, up
  to 16) only while it keeps missing. At the end of every epoch it converts a
  pair back if it missed little.
* **Read/write-aware swapping.** Every line counts the accesses that its
  domain is bad at: writes to an FRHE line and reads of an SRLE line. When
  the count runs out, the line trades places with a line of the other
  domain. The threshold grows with every swap in the same epoch, so lines
  that are both read and written do not thrash.

The cache is the shared L3 of an 8-core chip. It has 8 MB in 8 static-NUCA
banks with 64 B lines, 8–16 ways per set, and 1024 sets per bank.

## Cell and array timing (`stripped_data_array`)

Each access of the data array is a fixed sequence of cell steps. A read step
takes `RD_STEP_CYC` cycles (default 2) and a write step `WR_STEP_CYC` cycles
(default 20).

| access                 | steps                                        | default cycles |
|------------------------|----------------------------------------------|---------------:|
| FRHE read              | read hard                                    | 2  |
| SRLE read              | read hard, read soft                         | 4  |
| FRHE write             | read hard, read soft, write hard, write soft | 44 |
| SRLE write             | write soft                                   | 20 |
| SLC read               | read soft                                    | 2  |
| SLC write              | write soft                                   | 20 |
| format pair as SLC     | write hard (all 0), write soft (data)        | 40 |

Every FRHE write rewrites the soft line of its pair with the value read in
step 2, because the hard-write step overwrote it. The array stores one
512-bit vector per domain and pair. A hard write sets both vectors, exactly
as the cell does. `done` pulses once, exactly the sum of the step times
after the request is accepted. `last_steps` reports how many steps were
used.

The cycle values are derived, not given. The device numbers are a 0.96 ns
read and a 10 ns write pulse at a 2 GHz clock. The 2-cycle read step also
matches the 2-cycle gap between a soft-domain and a hard-domain read hit in
the published cache latencies.

## Ways, pairs and tags

A set has 8 pairs, numbered *p* = 0..7, and 16 way slots:

* way `2p` is the soft-domain line of pair *p*: the SLC line while the pair
  is SLC, and its SRLE line while it is MLC;
* way `2p+1` is the hard-domain (FRHE) line. It can be valid only while
  pair *p* is MLC.

The tag/state array is read in one serial lookup of `LOOKUP_CYC` = 3 cycles.
It holds, per set:

* 16 tags with valid and dirty bits;
* 16 LRU ages;
* per line, `Scnt` and `SWcnt`;
* the associativity state: `Wcnt`, `Mcnt`, the circular pointer, the MLC mask
  and a pending-grow flag;
* the epoch stamp.

A tag is the full 34-bit line address of a 40-bit physical address. The tag
width therefore does not change with `SETS`.

## Growing and shrinking a set (`assoc_adjust`)

`Wcnt` is the set's current associativity. `Mcnt` is loaded with
`Wcnt × ASSOC_N` and counts misses down.

* **Grow.** When `Mcnt` reaches 0, the first SLC pair at or after the
  circular pointer turns MLC. `Wcnt` goes up by one, the pointer moves past
  that pair, and `Mcnt` is reloaded for the new `Wcnt`. The pair's SLC line
  stays where it is, because it already lives in the soft domain, which is
  now the SRLE way. The next miss of the set fills the new hard-domain way.
* **Shrink.** At the end of an epoch, a set shrinks by one pair if
  `Mcnt > 8 × ASSOC_N` (it saw fewer misses than an 8-way set allows) and
  `Wcnt > 8`. The bank then:
  1. evicts the LRU line among the lines of MLC pairs, writing it back if
     dirty;
  2. reads the other line of the pair;
  3. formats the pair as SLC: hard domains to 0, then the surviving line into
     the soft domain.

  `Mcnt` is reloaded at every epoch end.

Epochs are `EPOCH_CYC` cycles long (default 1,000,000, that is 0.5 ms at
2 GHz). Each bank has one free-running epoch counter. A set records the epoch
it last saw and runs its end-of-epoch step lazily, on its first access in a
later epoch. A set idle for several epochs therefore takes only one step.
This avoids a sweep over all 1024 sets at every epoch boundary.

## Swapping (`swap_policy`)

Each line of an MLC pair has `Scnt` (12 bits) and `SWcnt` (8 bits,
saturating at 255).

* A write to an FRHE line, or a read of an SRLE line, decrements `Scnt`.
* At 0 a swap is requested. `SWcnt` goes up by one, and `Scnt` is reloaded
  with `SWcnt × SWAP_N`.
* A fill, and the end of an epoch, set `SWcnt = 1` and `Scnt = SWAP_N`.

On a swap, the bank exchanges the line with the LRU line of the other domain
among the set's MLC pairs. Both data lines are rewritten. Tags, dirty bits,
ages and counters move with their lines. A partner always exists, because the
line's own pair has a way of the other domain. If the chosen way is empty,
the line simply moves there.

## The bank (`llc_bank`)

The bank is a single-port controller that handles one operation at a time:

```
requests ─► bank_queues ─► lookup (3) ─► [epoch step, maybe shrink] ─┬─► hit:  data array ─► response
(RDQ 8, WRQ 32)                                                      └─► miss: [grow] ─► victim ─► [write-back]
     │ a read hitting a pending write                                          ─► fetch ─► fill ─► response
     ▼ is answered from the WRQ                             after a hit or fill: [swap]
```

* **Reads** that hit answer with the data. Reads that miss choose a victim,
  write it back if it is dirty, fetch the line from memory, fill it and
  answer.
* **Write requests** are full-line write-backs from a core's L2. They are
  not answered. A write miss allocates its line without fetching from
  memory.
* **Victims.** Candidates are the enabled ways of the set: the soft way of
  every pair, and the hard way of every MLC pair. Empty ways come first, then
  the oldest.
  If the set has a grow pending, the new hard-domain way is used.
* **Queues.** `bank_queues` holds an 8-entry read queue and a 32-entry write
  queue. Reads go first. Writes go first only while the write queue is more
  than 80 % full (26 or more entries). An arriving read is compared with
  every pending write. If it matches, the youngest such write answers it at
  once, and the read never enters the read queue.
* **Events.** The `ev` output pulses on FRHE, SRLE and SLC hits, misses,
  grows, shrinks, swaps, write-backs, write-queue forwards and write-priority
  picks.
* **Read-hit latency.** Measured from the cycle a request is accepted to the
  cycle its response is valid:
  * 11 cycles for FRHE and SLC lines;
  * 13 cycles for SRLE lines.

  Each is the 3-cycle lookup, plus the read steps, plus 6 cycles for the
  queue and the handshakes.

After reset the bank spends `SETS` cycles clearing its set states. It raises
`init_done` when it has finished.

## The whole cache (`llc_top`)

`llc_top` connects 8 core ports to 8 banks. Address bits [8:6], the lowest
bits of the set index, choose the bank. Each bank has a round-robin arbiter
(`rr_arbiter`) over the cores, and each core has a round-robin arbiter over
the banks' responses. A response carries its core id, an address, a
hit/forward flag and the data. Each bank has its own memory port. Memory
returns fill data in order, with one read outstanding per bank.

## Where this departs from the source design

* **Interconnect.** The chip these numbers come from connects cores and
  banks through a 2×4 mesh network-on-chip and keeps coherence with a MOESI
  directory. Neither is built here. A crossbar with fair arbitration stands
  in for the network.
* **Cores and memory.** The cores, their private caches and the DDR3 memory
  controllers are outside the RTL. They appear only as ports. The testbenches
  use a simple memory model (`tb/mem_model.sv`) with a fixed latency and
  random back-pressure.
* **Values that had to be chosen.** The following are this design's own
  choices:
  * the epoch length;
  * both counter thresholds (`ASSOC_N` and `SWAP_N`, default 4 each);
  * the step times in cycles;
  * the address width;
  * the handshakes;
  * reset behaviour;
  * which line survives a shrink;
  * the choice of swap partner.
* **Write latency.** The published per-access latencies list a hard-domain
  write hit as faster than a soft-domain one. The step sequences above make
  SRLE writes one step and FRHE writes four. The step sequences are followed
  here, so soft writes are the fast ones.
* **Swap weight limit.** The swap weight counter is described as reaching
  256 in 8 bits. It saturates at 255 here.
* **Analog circuits.** The cell, its write current sources and the
  multi-reference sense amplifier are analog circuits. Only their digital
  behaviour is modelled.

## Files

| file | contents |
|------|----------|
| `rtl/mlc_pkg.sv` | sizes, request/response/state structs, enums |
| `rtl/stripped_data_array.sv` | MLC data array and its cell-step sequencer |
| `rtl/assoc_adjust.sv` | per-set grow/shrink rule (combinational) |
| `rtl/swap_policy.sv` | per-line swap counters (combinational) |
| `rtl/lru_repl.sv` | LRU ages and victim choice (combinational) |
| `rtl/bank_queues.sv` | RDQ/WRQ, write forwarding, 80 % write priority |
| `rtl/llc_bank.sv` | bank controller |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/llc_top.sv` | 8-core, 8-bank cache |
| `tb/tb_*.sv` | self-checking testbenches, one per block |
| `tb/mem_model.sv` | behavioural main memory for the testbenches |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends it if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/mlc_pkg.sv rtl/*.sv tb/mem_model.sv tb/tb_llc_bank.sv \
    --top-module tb_llc_bank -o sim
./obj_dir/sim
```

Substitute the testbench and top module you want. The block testbenches and
what they show:

* `tb_stripped_data_array`: step counts and exact cycle latencies for every
  access type, including restoring the soft line after an FRHE write.
* `tb_assoc_adjust`, `tb_swap_policy`, `tb_lru_repl`: each checks its block
  against an independent model over exhaustive or random inputs.
* `tb_bank_queues`: ordering, forwarding from the youngest write, the write
  priority threshold and back-pressure.
* `tb_llc_bank`: a 4-set bank with short epochs.
  * Checks the hit latencies above.
  * Checks every response against a reference model of memory contents.
  * Counts every mechanism: all three hit types, misses, grows, shrinks,
    swaps, write-backs, forwarding, write priority and stalls. Any that never
    occurs counts as a failure.
* `tb_llc_top`: 8 cores send random reads and writes to a scaled-down
  cache. Each response is checked against the history of writes to its line.
* `tb_llc_set_demand`: one bank of 512 sets, i.e. a single-core 512 KB
  16-way cache, with all policy and timing parameters at their defaults.
  * Eight sets cycle over 12 lines each; eight others use only 4 lines.
  * The busy sets must grow to exactly 12 ways after exactly 152 misses each
    (32 + 36 + 40 + 44), and then stop missing. A fixed 8-way cache would
    miss on every one of their accesses.
  * The quiet sets must stay at 8 ways.
* `tb_llc_top_full`: the full 8 MB configuration with default parameters.
  * Each core misses, writes and reads back its own line.
  * The data and the hit latency are checked.

To study another size, change `SETS` and `NBANKS` (for example
`NBANKS = 1, SETS = 512` for a 512 KB 16-way cache). Change `EPOCH_CYC`,
`ASSOC_N` and `SWAP_N` for the policy parameters.
