# FDIP-X: a fetch-directed instruction prefetcher with a partitioned, compressed BTB

Large server programs miss in the instruction cache all the time. Fetch-directed
instruction prefetching (FDIP) hides those misses by letting the branch predictor
run ahead of instruction fetch. Its predictions go into a queue, and every address
in the queue that is not yet being fetched is a prefetch candidate. How far ahead
the predictor can see depends on how many branches the branch target buffer (BTB)
holds: once a branch drops out of the BTB, the run-ahead stream goes wrong at that
branch.

FDIP-X gets more branches into the same BTB storage. It does this in three ways:

* **Partitioned offsets.** Most branches jump only a short distance. The BTB is
  split into four physical BTBs whose target fields are 8, 13, 23 and 46 bits wide.
  Each branch is stored in the narrowest one that can hold its target offset.
* **Compressed tags.** Each tag is folded down to 16 bits with XOR.
* **Instruction-based BTB.** Each entry describes one branch instruction, not a
  basic block, so no block-size field is needed.

At the smallest budget this gives 2416 branch entries in 10.06 KB of tag, type
and offset storage. A conventional 8-way basic-block BTB holds 1024 entries in
11.5 KB.

The published trace-driven evaluation (IPC-1 client and server traces) reports
what this buys. On server traces, 45 KB of FDIP-X BTB comes within 2.5 points of
the speedup of an unlimited BTB: 27.8% against 30.3% over no prefetching. FDIP
with a basic-block BTB needs close to 200 KB to do as well. Folding the tags to
16 bits cost 0.04 points at the smallest budget. This RTL reproduces the
organisation, not those simulations.

This repository holds synthesizable SystemVerilog for the complete front end, along
with self-checking testbenches. The front end consists of the branch prediction
unit with the partitioned BTB, the fetch target queue, the prefetch engine with its
throttling filter, the fetch unit and an L1 instruction cache. The next cache level
and the core back end are outside the design. They appear as ports.

## Block diagram

```
                      upd (resolved branches), redirect
                                   |
          +------------------------v-----------------------+
          | fdipx_bpu  (branch prediction unit)            |
          |   fdipx_btb: 4 x fdipx_btb_part (+tag hash)    |
          |   fdipx_bimodal, fdipx_ras                     |
          +------------------------+-----------------------+
                                   | fetch blocks {start, count}
                                   v
          +------------------------------------------------+
          | fdipx_ftq   [head][ c ][ c ][ c ] ...          |
          +-----+---------------------------+--------------+
        head    |                           | candidates (non-head)
                v                           v
    +------------------+        +-------------------------------+
    | fdipx_fetch_unit |        | fdipx_prefetch_engine         |
    |  demand lookup   |        |  fdipx_pf_filter (10 blocks)  |
    +---+----------+---+        +---+--------------+------------+
        | demand   | miss           | probe        | prefetch request
        v          v                v              v
    +-----------------------------------------------------------+
    | fdipx_l1i: demand port beats probe port; miss/prefetch    |
    | arbitration (demand first) to llc_req_*; fill_* installs  |
    +-----------------------------------------------------------+
        | fetch bundles (out_*) to the core      ^ v  next level (LLC)
```

## The partitioned BTB (`fdipx_btb`, `fdipx_btb_part`, `fdipx_tag_hash`)

This block holds the main idea of the design, and most of its subtleties.

**Entry format.** An entry in partition *p* holds:

| field  | bits              | meaning |
|--------|-------------------|---------|
| valid  | 1                 | added by this RTL (the paper's entry sizes do not count it) |
| tag    | 16                | compressed tag, see below |
| type   | 2                 | `BR_COND`, `BR_JUMP`, `BR_CALL`, `BR_RET` (encoding in `fdipx_pkg`) |
| offset | 8 / 13 / 23 / 46  | signed target offset in instructions: target = pc + offset |

Offsets count instructions, not bytes. Every instruction is 32-bit aligned in a
48-bit virtual address space, so the whole front end works on 46-bit word
addresses (`pc_t`). The 46-bit field therefore reaches any target: the offset is
taken modulo 2^46, and in this partition it is in effect a full target address.

**Allocation rule.** The core reports a resolved branch on `upd`. If it was taken,
`fdipx_btb` computes `offset = target - pc` and writes the branch into the first
partition whose field holds that offset as a two's complement number:

| partition | field | offsets held               |
|-----------|-------|----------------------------|
| 0         | 8     | -128 .. 127                |
| 1         | 13    | -4096 .. 4095              |
| 2         | 23    | -2^22 .. 2^22-1            |
| 3         | 46    | everything                 |

The field includes the direction (sign) bit. In the same cycle the branch is
invalidated in the other three partitions. A branch therefore lives in exactly one
partition, even when its target moves, as with an indirect jump. Returns are stored
with offset 0, because their target comes from the return address stack.
Not-taken resolutions do not allocate. If a hash alias makes more than one
partition hit, the narrowest partition wins.

**Lookup.** All four partitions are indexed with the same address in the same
cycle. The lookup is combinational, and the merged result is hit, type, target and
the partition that supplied it. Inside a partition, the set index is the low
log2(SETS) bits of the word address. Replacement takes an invalid way first,
otherwise the set's round-robin pointer. A write to a branch already present
updates it in place.

**Tag compression.** The full tag is what remains of the 46-bit word address after
the index: 39 bits for 128 sets, 42 bits for the 16-set partition 3.
`fdipx_tag_hash` keeps the 8 low bits unchanged. It XORs the remaining bits
together, 8 at a time, into the upper 8 bits: bit 8+i of the full tag folds into
bit 8+(i mod 8), and the last block is zero-padded.

**Default size, and the other budgets.** The defaults reproduce the smallest
FDIP-X configuration: three partitions of 128 sets x 6 ways (768 entries each) and
a 112-entry 46-bit partition, built here as 16 sets x 7 ways. That is
768 x (26 + 31 + 41) + 112 x 64 = 82,432 bits = 10.06 KB, exactly the memory that
synthesis reports for `fdipx_btb`, plus 2416 valid bits. The larger budgets keep
the associativity and double the set counts:

| budget (KB) | BTB_SETS | BIG_SETS | entries (3 x n + big) |
|-------------|----------|----------|-----------------------|
| 11.5 (default) | 128   | 16       | 3 x 768 + 112         |
| 22.75       | 256      | 32       | 3 x 1536 + 224        |
| 45          | 512      | 64       | 3 x 3072 + 448        |
| 89          | 1024     | 128      | 3 x 6144 + 896        |
| 176         | 2048     | 256      | 3 x 12288 + 1792      |
| 348         | 4096     | 512      | 3 x 24576 + 3584      |

## Address generation (`fdipx_bpu`, `fdipx_bimodal`, `fdipx_ras`)

The BPU holds a current address `pc` and looks it up once per cycle. On a BTB hit:

* calls, jumps and returns are taken;
* a conditional branch is taken when its 2-bit bimodal counter says so;
* a taken branch continues at its target, or for a return at the top of the
  return address stack;
* a call pushes pc+1 onto the stack, and a return pops it.

On a BTB miss, or for a not-taken branch, the BPU goes on to pc+1.

Consecutive addresses are packed into **fetch blocks** `{start, count}`. A block
ends at a predicted-taken branch, at the last instruction of a 64-byte line, or
after `FETCH_WIDTH` instructions. It is pushed into the FTQ in the cycle its last
instruction is looked up.

The BPU advances only while the FTQ has room, so a full FTQ stops run-ahead. This
is the second throttle. A `redirect_valid` pulse restarts the BPU at `redirect_pc`
in the next cycle and drops the partly built block.

Because the BTB is instruction-based, every instruction address costs a BTB
lookup. The BPU therefore produces at most one instruction per cycle. Fetch can
consume a whole block per cycle, so the queue fills only while fetch is stalled
on a miss, which is exactly when run-ahead pays off.

## Fetch target queue and prefetching (`fdipx_ftq`, `fdipx_prefetch_engine`, `fdipx_pf_filter`)

The FTQ is a circular FIFO. Its head is the fetch point. Besides the head and
tail pointers it keeps a **scan distance**, always at least 1. The entry at
head + scan is the current prefetch candidate. When the prefetch engine
acknowledges a candidate, the scan distance grows by one; when the head is
popped, it shrinks by one. Each non-head entry is thus offered once, in order. An
entry that becomes the head before being scanned is skipped, since fetch is
already on it.

The prefetch engine handles one candidate per cycle, entirely within that cycle:

1. It looks up the candidate's block in the **recent-prefetch filter**, a
   10-entry, fully associative, FIFO-replaced list of the blocks prefetched most
   recently. A hit drops the candidate. This is the first throttle.
2. Otherwise it probes the L1-I. The L1-I has one tag lookup per cycle and gives
   it to a demand fetch first, so the probe waits until it is granted. A probe
   hit drops the candidate.
3. On a probe miss it raises a prefetch request. When the request is accepted,
   the block enters the filter and the candidate is acknowledged.

## Fetch unit and L1-I (`fdipx_fetch_unit`, `fdipx_l1i`)

The fetch unit looks up the head block's line on the demand port. On a hit it
pops the FTQ and registers a fetch bundle: start pc, count, and up to
`FETCH_WIDTH` instruction words. It hands the bundle to the core one cycle later
with a valid/ready handshake.

On a miss it sends one demand-miss request. It then stays off the L1-I until the
fill for its block appears on the fill bus, so that prefetch probes can use the
tag port during the miss. Retrying the lookup every cycle would instead hold the
tag port for the whole miss and block almost every probe. In the end-to-end test
that costs about 60% more cycles.

`fdipx_l1i` is a 64-set, 8-way cache with 64-byte lines and round-robin
replacement. Demand misses and prefetches share one request channel to the next
level, with demand first; `llc_req_prefetch` tells the two apart. A fill for a
line that is already present is dropped.

## Top-level interface (`fdipx_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `redirect_valid`, `redirect_pc` | in | one-cycle pulse: restart at `redirect_pc`, flush the FTQ and the fetch bundle |
| `upd` (`br_update_t`) | in | one resolved branch per cycle: pc, type, taken, target |
| `out_valid`, `out_ready`, `out_pc`, `out_count`, `out_instr[FETCH_WIDTH]` | out/in | fetch bundles to the core |
| `llc_req_valid/ready`, `llc_req_blk`, `llc_req_prefetch` | out/in | line requests to the next level (block address = word address >> 4) |
| `fill_valid`, `fill_blk`, `fill_data[511:0]` | in | line fills, any order, any latency |
| `ev_*` | out | one-cycle event pulses: BTB hit (and its partition), FTQ-full stall, prefetch filtered / probe hit / issued, probe blocked by demand, demand miss |

Reset clears every valid bit, every pointer and the return address stack. Array
payloads carry no reset; they are always read behind a valid bit.

## Parameters

| parameter (fdipx_top) | default | origin |
|-----------------------|---------|--------|
| `BTB_SETS`, `BTB_WAYS` | 128, 6 | paper (11.5 KB budget) |
| `BIG_SETS`, `BIG_WAYS` | 16, 7 | paper gives 112 entries; the split is this design's |
| offset widths (`fdipx_btb`) | 8, 13, 23, 46 | paper |
| tag width | 16 | paper |
| `FILTER_ENTRIES` | 10 | paper |
| `FTQ_DEPTH` | 16 | this design |
| `FETCH_WIDTH` | 4 | this design |
| `BP_ENTRIES` | 4096 | this design (bimodal predictor) |
| `RAS_DEPTH` | 16 | this design |
| `L1I_SETS`, `L1I_WAYS` | 64, 8 (32 KB) | this design |

## Departures from the published design

The paper describes the BTB organisation in detail. For the rest of the front end
it gives the roles and the two throttles. Everything below is this RTL's own choice:

* The direction predictor, which the paper only names, is a bimodal table.
* The return address stack is circular and is not repaired after a redirect.
* FTQ entries are fetch blocks of at most `FETCH_WIDTH` instructions within one
  line. The paper's FTQ holds basic blocks, but FDIP-X has no block size in its
  BTB, so block boundaries come from the line size and the fetch width.
* The fetch engine issues one line lookup per FTQ entry, not N separate
  per-instruction requests.
* The prefetch engine looks at one candidate per cycle. The scan is in order and
  each entry is looked at once.
* L1-I size and replacement, BTB replacement, and all interface timing are this
  design's. The paper gives none of them.
* The sign bit is counted inside the offset field. This makes the entry sizes add
  up to the paper's 26/31/41/64 bits.
* The 112-entry 46-bit partition is 16 x 7, because 112 cannot be split into 6
  ways over a power-of-two number of sets.

## Simulating

All code is SystemVerilog-2017 and runs on Verilator 5 (two-state; `--timing`
for the testbenches). Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fdipx_pkg.sv tb/fdipx_tb_pkg.sv tb/tb_fdipx_top.sv --top-module tb_fdipx_top
./obj_dir/Vtb_fdipx_top
```

Include paths are relative to the repository root: run from there.

| testbench | what it checks |
|-----------|----------------|
| `tb_fdipx_tag_hash` | folded XOR against a block-by-block reference, 39- and 42-bit tags |
| `tb_fdipx_btb_part` | install, in-place update, round-robin eviction, invalidate |
| `tb_fdipx_btb` | partition choice at every range edge, exact targets, migration between partitions, returns, wrap-around |
| `tb_fdipx_bimodal`, `tb_fdipx_ras`, `tb_fdipx_pf_filter` | against reference models |
| `tb_fdipx_ftq` | FIFO order, full, scan order, skipped candidates, flush |
| `tb_fdipx_prefetch_engine` | filter / probe / request sequence, demand priority, filter capacity |
| `tb_fdipx_l1i` | hits and data, probe priority, request arbitration, duplicate fills, eviction |
| `tb_fdipx_fetch_unit` | bundle contents, one request per miss, port left free during a miss, backpressure, flush |
| `tb_fdipx_bpu` | fetch-block sequences for sequential code, jumps, calls/returns (near and 46-bit), conditional branches before and after training, FTQ-full stall |
| `tb_fdipx_top` | end to end, with a 16-line L1-I: runs a 20,000-instruction synthetic program (`fdipx_tb_pkg`), checks every fetched word, and requires that every mechanism above occurs |
| `tb_fdipx_full` | the same program with every parameter at its default |
| `tb_fdipx_btb_budgets` | the BTB at all six budgets of the table above: sampled sets of every partition hold exactly their associativity |

The end-to-end testbenches use two behavioural models that are not part of the
design. `fdipx_core_model` executes the program along its true path. It sends
resolved branches back on `upd` and redirects on the first wrong address.
`fdipx_llc_model` returns lines after 20 cycles.

In `tb_fdipx_top`, 20,000 instructions retire in about 25,600 cycles with 94
redirects. All four BTB partitions supply predictions, and the return address
stack predicts returns correctly.
