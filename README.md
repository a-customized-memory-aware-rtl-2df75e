# Needleman-Wunsch alignment inside a 3D-stacked memory

Global alignment of DNA sequences with the Needleman-Wunsch dynamic program
does very little arithmetic per byte it moves. Every cell of the
(n+1) x (m+1) score matrix is `max(NW + T(a,b), N + gap, W + gap)`: one
2-bit compare and a few 32-bit additions. A straightforward implementation
reads and writes one 32-bit cell per cell it computes, so its speed is set
by memory bandwidth, not by how many adders it has.

This RTL implements an accelerator built to avoid that limit. It follows the
memory-aware architecture of Akbari, Modarressi and Khadem ("A Customized
Memory-aware Architecture for Biological Sequence Alignment"). Two ideas
carry it:

* **Blocked wavefront.** The matrix is cut into bands of P rows. A linear
  array of P functional units sweeps each band column by column, one
  anti-diagonal at a time. Every intermediate cell stays in registers. Only
  the last row of a band goes back to memory, to serve as the top boundary
  of the next band. Memory traffic falls from about three words per cell to
  about two words per P cells.
* **Processing in memory.** One such processing element (PE) sits in the
  logic layer of every vault of an HMC-like memory cube (32 vaults). Next to
  it is an address generation unit (AGU) that fetches the PE's operands from
  the vault. All vaults align the same query against their own share of a
  sequence database at the same time. Each vault reports its best score.

The RTL covers everything the architecture adds to the logic layer. That is
the functional unit, the PE, the AGU, the five queues of a vault and the
arbiter in front of the vault controller. One `vault_pim_unit` per vault
holds all of these, and the top, `pim_logic_layer`, has 32 of them. The
packet switch, the vault controllers, the DRAM and the host links belong to
the memory cube. They are not designed here, so their side of each
connection appears as ports of the top.

## The wavefront inside a block

This is the part that takes the most care to follow.

Number the query characters (rows) 1..n and the reference characters
(columns) 1..m. A block covers rows `base+1 .. base+P`, where `base` is a
multiple of P. Unit `r` (0..P-1) owns row `base+1+r`, and its B register
holds that row's query character for the whole block. Reference characters
enter at unit 0, one per step. They move down one unit per step through the
A registers. So in step `s` (counted from 0), unit `r` computes column
`s - r + 1`:

```
step s:     0      1      2      3      4     ...
unit 0:   (1,1)  (1,2)  (1,3)  (1,4)  (1,5)
unit 1:     -    (2,1)  (2,2)  (2,3)  (2,4)
unit 2:     -      -    (3,1)  (3,2)  (3,3)
unit 3:     -      -      -    (4,1)  (4,2)       (row, column), P = 4
```

Each unit has two score registers. **RA1** holds the cell the unit computed
in the previous step, and **RA2** holds the one from the step before. From
the table, unit `r` finds its neighbours here:

| operand    | unit r > 0  | unit 0                                        |
|------------|-------------|-----------------------------------------------|
| north      | RA1[r-1]    | boundary cell DP(base, j), from memory        |
| north-west | RA2[r-1]    | the north operand of the previous step (`nw0`) |
| west       | RA1[r]      | RA1[0]                                        |

Unit 0's north-west is the previous step's north. That is why unit 0 needs
only one boundary word per column.

Column 0 needs no special case. When a block starts, RA1[r] is loaded with
the left boundary `DP(base+1+r, 0) = (base+1+r)*gap`, and `nw0` with
`base*gap`. RA2 takes RA1 on every step, but a unit only updates its RA1
once its first column has arrived (`s >= r`). So when unit `r` computes
column 1:

* its west operand is still the preset boundary;
* its north-west operand is the preset boundary of the row above, which has
  just moved into RA2[r-1].

In the first block, the north boundary `DP(0, j) = j*gap` is generated by a
counter, not read from memory.

A block runs `m + P` steps. The last P steps are padding columns that let
the lower units finish. After step `s >= P`, the cell `DP(base+P, s-P+1)` of
the bottom row moves into RA2[P-1]. On the same edge it is pushed into the
store queue, to be written back as the next block's top boundary. The cells
of the other rows are never stored. In the last block nothing is written
back. Instead, the score `DP(n, m)` is captured from unit `n-1-base`, which
allows `n` that is not a multiple of P.

A step happens only in a cycle where its operands are present:

* the boundary word is at the head of the load queue (except in the first
  block);
* the store queue has room, if the step pushes a cell.

Otherwise the array stalls, with every register holding its value. Loading
a new reference word, which happens every 16 columns, takes a cycle of its
own. Without stalls, a block therefore takes
`1 + (query words) + ceil(m/16) + (m + P)` cycles. The last block takes
`m + (n-1-base)` steps instead of `m + P`.

## What a vault adds in front of its controller

```
 host packets ──► PIM queue ──► AGU ──► address queue ──┐
                                 │  ▲                   ├─► arbiter ──► vault controller
 host requests ─► memory queue ──┼──┼───────────────────┘      │
                                 ▼  │ (metadata)               │ read data
                   PE ◄──── load queue ◄───────────────────────┤
                   │                                           └─► host
                   └──► store queue ──► (write data for AGU writes)
```

**AGU.** The AGU takes a PIM packet with five fields:

* `ref_addr`: where the references start;
* `query_addr`: where the query is;
* `meta_addr`: where the metadata is;
* `query_len`: the query length;
* `dp_addr`: where the two boundary rows go.

It reads the metadata. Word 0 is the number of references, and word `1+i`
is the length of reference `i`. References follow one another, each
starting on a word boundary. For every reference, and for every block of P
query rows, the AGU does the following:

1. It waits until the PE is idle, then starts the PE on the block.
2. It requests the query words that hold the block's rows.
3. For each column `k` it requests, in this order:
   * the reference word, when `k % 16 == 0`;
   * the boundary cell `DP(base, k+1)`, except in the first block;
   * a write of the bottom-row cell of column `k - LAG + 1`, except in the
     last block.

The two boundary rows alternate between `dp_addr` and `dp_addr + m`.

**Data order.** The load queue delivers data in exactly the order in which
the AGU asked for it, and the PE consumes it in that same order. This works
because:

* the vault controller answers reads in order;
* the arbiter reserves room in the load queue for every AGU read it sends.

Nothing in the data says what it is. The AGU reads the metadata through the
same queue, and it does so only while the PE is idle.

**Write-back lag.** The PE produces the bottom-row cell of column `c` after
it has consumed the operands of column `c + P`. The address queue is a
FIFO, and a write at its head waits for its data in the store queue. A
write issued exactly P columns behind would therefore block the reads
queued behind it until a memory round trip completes. The AGU issues each
write `LAG = P + WB_SLACK` columns behind, with `WB_SLACK = STQ_D - 2` (6 by
default). This keeps the vault's request port busy on every cycle. With a
lag of exactly P, the measured cost was 3.4 cycles per request. The store
queue must be deeper than `WB_SLACK`, or the PE and the AGU could wait for
each other.

**Arbiter.** AGU requests have priority over regular host requests. A host
request goes only in a cycle in which the AGU's head request cannot go:

* a write whose data is not yet in the store queue, or
* a read with no room reserved in the load queue.

A FIFO of one-bit tags tells whether each returning word belongs to the AGU
(load queue) or to the host.

**Result.** Each vault keeps the largest score of the run and the index of
the reference that produced it. `run_done` pulses when the run finishes,
and `result_valid` stays high until the next packet. The host takes the
maximum over the vaults. It then reruns the full alignment with traceback on
the winning reference; the accelerator computes scores only.

## Memory traffic and rate

For a query of n characters and a reference of m characters, with
B = ceil(n/P) blocks, one alignment makes these requests:

* (B-1)·m boundary reads;
* (B-1)·m boundary writes;
* B·ceil(m/16) reference-word reads;
* a few query and metadata reads.

Each check below uses one vault at P = 16, with a memory that takes one
request per cycle:

| workload                                           | cells  | cycles    | requests  |
|----------------------------------------------------|--------|-----------|-----------|
| 1000-character read vs 60,000-character reference  | 60.0 M | 7,676,488 | 7,676,315 |
| 160-character query vs 3 references of 60,000     | 28.8 M | 3,352,745 | 3,352,534 |

The PE keeps the memory port saturated, at about 7.8 cells per memory
request. Throughput is therefore set by the vault's request rate, as the
architecture intends. For scale, consider a vault that delivers 10 GB/s,
which is 2.5·10^9 words per second. It would sustain roughly 19·10^9 cell
updates per second, while the PE would need a clock of only 2.5 GHz to
keep up. These figures assume ideal DRAM; row-buffer misses and refresh
are not modelled. The full 60k x 60k database-search alignment
(3.6·10^9 cells) fits the design easily: it needs about 128k words of the
2^25 words a vault addresses. It is too long to simulate.

## Parameters

| parameter                          | default | where                      | origin |
|------------------------------------|---------|----------------------------|--------|
| `NUM_VAULTS`                       | 32      | `pim_logic_layer`          | HMC configuration |
| `P`                                | 16      | top, vault, PE, AGU        | 16 functional units per vault (480 units over 32 vaults) |
| `MATCH`, `MISMATCH`, `GAP`         | +1, -1, -2 | `nw_pkg`, FU, PE        | scoring of the worked example |
| `PIMQ_D`, `MEMQ_D`, `ADRQ_D`, `STQ_D`, `LDQ_D` | 4, 8, 8, 8, 16 | top, vault | this design |
| `WB_SLACK`                         | `STQ_D-2` | AGU                      | this design |
| word / cell / character            | 32 / 32 / 2 bits | `nw_pkg`          | as published |
| `ADDR_W`                           | 25      | `nw_pkg`                   | 4 GB over 32 vaults, 32-bit words |

## Where this RTL departs from, or adds to, the published description

* The published description disagrees with itself on which sequence stays
  in the array. The prose calls the blocked, stationary sequence the
  reference. The address-generation pseudocode, however, blocks over the
  query length carried in the PIM packet. This RTL follows the pseudocode:
  the query is cut into blocks and stays in the array, and each reference
  is streamed. The score does not depend on this choice. Keeping the query
  stationary also lets one packet cover many references of different
  lengths.
* The published text uses -1 for a gap in one place, while the worked
  example uses -2. The default here is -2, and it is a parameter.
* The figure of the functional unit shows operand registers and a result
  register. Here the operand registers are the neighbours' RA1/RA2, and the
  result register is the unit's own RA1. This keeps the stated one-cycle
  datapath latency.
* The published pseudocode takes the number of references from the PIM
  packet. The text says the metadata holds it, and this RTL follows the
  text. The layouts of the metadata, the sequences and the character packing
  (character k in bits `[2(k%16)+1 : 2(k%16)]`) are this design's own.
* Write-back runs `WB_SLACK` columns later than the pseudocode's lag of P,
  for the reason given above.
* The first block computes its top boundary instead of reading it. The last
  block writes nothing back. The traffic therefore matches the published
  count of (n/p)-1 boundary rows exactly.
* The PE checks its own operands instead of waiting for a separate "ready"
  from the AGU. The AGU waits for the PE to finish between blocks and
  between references. This costs a few cycles per block.
* Loading a reference word costs one cycle every 16 columns.
* The vault reports the index of the best reference next to its score.
* Queue depths, ready/valid handshakes and the synchronous active-low reset
  are this design's own choices.
* Not built: the packet switch, the vault controllers, the DRAM, the serial
  links and the host. The traceback that the host reruns on the winning
  sequence is not built either.

## Files

`rtl/` (all synthesizable):

| file | contents |
|------|----------|
| `nw_pkg.sv` | widths, scores, PIM packet and request structs |
| `align_score.sv` | match/mismatch score of two characters |
| `functional_unit.sv` | one cell update: three adders and a max |
| `alignment_pe.sv` | the P-unit wavefront array with RA1/RA2 |
| `agu.sv` | address generation state machine |
| `sync_fifo.sv` | the FIFO used for all queues |
| `vault_arbiter.sv` | AGU/host arbitration and read-data routing |
| `vault_pim_unit.sv` | everything one vault adds |
| `pim_logic_layer.sv` | top: one unit per vault |

`tb/`:

| file | what it checks |
|------|----------------|
| `nw_tb_pkg.sv` | reference model (full matrix and two-row versions) and sequence helpers |
| `vault_mem_model.sv` | behavioural vault controller with DRAM: in order, fixed latency, optional random back-pressure |
| `tb_align_score.sv`, `tb_functional_unit.sv`, `tb_sync_fifo.sv`, `tb_vault_arbiter.sv` | the small blocks |
| `tb_alignment_pe.sv` | every written-back cell and every score against the full matrix; cycles per block |
| `tb_agu.sv` | the exact request sequence and block starts |
| `tb_vault_pim_unit.sv` | one vault with memory and concurrent host traffic |
| `tb_pim_logic_layer.sv` | reduced top (4 vaults, P = 4, small queues) end to end; counts that stalls, store-queue back-pressure, load-queue credit limits, AGU priority, boundary reads, word loads and short last blocks all occur |
| `tb_pim_full.sv` | the same flow with every parameter at its default (32 vaults, P = 16) |
| `tb_workloads.sv` | the two workloads in the table above |

Every testbench ends by printing `TB_RESULT checks=N failures=F`.

## Simulating

With Verilator 5, run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/nw_pkg.sv tb/nw_tb_pkg.sv tb/tb_pim_full.sv --top-module tb_pim_full
./obj_dir/Vtb_pim_full
```

Replace `tb_pim_full` with any other testbench name. Most testbenches run
in well under a second. `tb_workloads` takes about 15 seconds.

To change the geometry, override the parameters of `pim_logic_layer`:

* `P` can be any value of 1 or more. Blocks that straddle a 16-character
  word are handled.
* Queue depths can be changed, but keep `STQ_D >= 2`.

## How far to trust it

* Every score has been compared with an independent row-by-row reference
  model, over many random lengths.
* The tested lengths include:
  * queries shorter than one block;
  * queries that are not a multiple of P;
  * references shorter than P;
  * a 1000 x 60,000 alignment.
* The cell values written back and the request sequence of the AGU are
  checked exactly.
* All of this runs against a simple memory model that answers in order.
  A real vault controller that reorders responses would break the routing
  of read data.
* Nothing here has been checked against real HMC timing, power or area.
