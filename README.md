# Near-data acceleration with concurrent host access — RTL

Main memory built from 3D-stacked DRAM chips can put a small processing element
(PE) on the logic die under every chip. Such near-data accelerators (NDAs) see the
full internal bandwidth of every rank, but in a normal DDR4 system the same ranks
also serve the host CPU. Usually one side has to wait: either the host gives whole
ranks to the NDAs, or it hands them fine-grained instructions one cache line at a
time. This design lets both sides use the same ranks at the same time:

* The host keeps absolute priority. An NDA issues a DRAM command only in a cycle in
  which the host memory controller is not using that rank's command slot.
* The NDAs never send anything back to the host. The host-side controller runs an
  exact copy of every rank's NDA state machine. NDA access patterns depend only on
  the operation, not on the data, so the copy issues the same commands in the same
  cycles. The host memory controller therefore always knows which rows the NDAs have
  opened and which timing constraints they have started.
* Host data and NDA data are kept in different banks by an address-mapping trick
  (bank partitioning), so the two streams do not keep closing each other's rows.
* NDA writes hurt host reads because of the DDR4 write-to-read turnaround.
  They can be throttled by a random coin (stochastic issue) or by a one-bit hint
  from the host saying which rank its oldest request reads (next-rank prediction).
* Software launches coarse operations (BLAS-1 vector kernels over whole vectors),
  not cache-line instructions, so launches use little command bandwidth. Each rank
  has a queue, so software can post several operations ahead.

The RTL covers the NDA logic die of each chip and the host-side NDA controller of
each channel, plus the host address mapper. The host CPU, the host memory
scheduler and the DRAM dice are outside it and connect through ports. The
testbenches contain behavioural versions of them.

## Organisation

```
                          chopim_system
 host address ──► host_addr_map (Skylake-style hash + bank partitioning)

 per channel (NCH = 2):
   software ──► nda_controller ──────────────── launch / host C/A bus ───────┐
                 ├ launch queue per rank, round-robin launch                  │
                 ├ next_rank_predictor ── inhibit pin per rank ──────────────┤
                 └ nda_sched replica per rank ─► rank_st (host MC's view)     │
                                                                              ▼
   per rank (NRANKS = 2), per chip (NCHIPS = 8):  nda_chip (logic die)
                 ├ nda_sched : nda_fsm (microcode sequencer)
                 │             nda_mc (NDA memory controller)
                 │             rank_state (bank/timing table)
                 │             stochastic_issue (write coin)
                 ├ tCL-deep read-tag pipeline
                 └ pe : 2 x fp32_fma, 3 scalars + 2 accumulators,
                        1KB buffer + 1KB scratchpad (pe_sram)
                      ▲ nda_dram_cmd / wdata ▼ rdata (tCL later) ── DRAM dice
```

Every chip of a rank gets the same host commands and launches, so the eight logic
dies of a rank run in lock-step. Each one works on its own 8-byte slice of every
64-byte cache line. An operand vector of N bytes per rank is N/8 bytes per chip.

## Keeping the two sides in step

This is the part of the design that makes everything else possible, and the
easiest to break when changing the RTL.

`nda_sched` is instantiated once per chip on the memory side and once per rank
inside `nda_controller` on the host side. Its inputs are exactly what both sides
can see:

| input | meaning |
|---|---|
| `host_cmd` | the host's command to this rank this cycle (both sides see the C/A bus) |
| `launch`, `pkt` | a launch packet, arriving at every chip of the rank and at the replica in the same cycle |
| `wr_inhibit` | the rank's next-rank-prediction pin, driven by the host side |
| `mode`, `log2_inv_p` | static configuration |

Inside, the coin (`stochastic_issue`) is a 16-bit LFSR. It starts from the same
seed on both sides and advances only on events both sides see. The sequencer's
wait after a read phase is a fixed cycle count, not a wait for data. An access
counts as done when its RD/WR command issues, not when data comes back. Under these
rules the replica's `nda_cmd` is bit-identical to every chip's `dram_cmd`, and its
`rank_state` table is the host memory controller's picture of the rank. The top
asserts this equality every cycle, and the system testbench checks it too.

Anything that depends on data, or on state that only one side has (such as the
host's request queue), must stay out of `nda_sched`. If it got in, the copies would
drift apart and the host would issue commands that break DRAM timing.

## Rank table and DDR4 timing (`rank_state`)

For each of the 16 banks the table tracks whether a row is open, which row, and
three down-counters: the earliest ACT, PRE and column command. Rank-wide counters
cover read-to-read, write-to-write, read-to-write and write-to-read spacing, and
ACT-to-ACT spacing. A command loads each counter with `max(counter-1, delay-1)`.
A ready flag is simply "counter is zero and the bank is in the right state". The
delays are tRCD, tRP, tRAS, tRC, tRTP, tCCD, tRRD, plus
RD→WR = tCL+tBL+tRTRS−tCWL, WR→RD = tCWL+tBL+tWTR and WR→PRE = tCWL+tBL+tWR.
The values are DDR4 numbers in clock cycles (tCL = tRCD = tRP = 16, tCWL = 12,
tRAS = 39, tRC = 55, tBL = 4, tRTP = 9, tWR = 18, tRTRS = 2). Bank groups are not
modelled, so the long variants are used everywhere (tCCD = 6, tWTR = 9,
tRRD = 6). tFAW and refresh are not modelled.

## NDA memory controller and write throttling (`nda_mc`)

The controller looks at the one access the sequencer presents and applies an
open-page policy:

* row hit: RD/WR once the table allows it;
* another row open: PRE;
* bank closed: ACT.

It issues nothing in a cycle in which the host issues to the rank, or in a launch
cycle. The host may precharge or re-activate an NDA bank at any time, and the NDA
then simply re-opens its row.

Throttling acts only on write commands that are otherwise ready to issue:

* `THR_STOCH`: the write flips the coin and issues only if the low
  `log2_inv_p` bits of the LFSR are zero, so with probability 2^-k. The coin
  advances on every attempt.
* `THR_NRP`: the write waits while the rank's inhibit pin is set.
  `next_rank_predictor` sets the pin one cycle after the host memory controller
  reports that its oldest queued request is a read to that rank.

Reads and row commands are never throttled.

## Operations, microcode and batches (`nda_fsm`)

| op | result | phases per batch |
|---|---|---|
| AXPBY | z = αx + βy | read x (SCALE α), read y (FMA β), write z |
| AXPBYPCZ | w = αx + βy + γz | read x (SCALE α), read y (FMA β), read z (FMA γ), write w |
| AXPY | y = αy + x | read x (LOAD), read y (FMA α), write y |
| COPY | y = x | read x (LOAD), write y |
| XMY | z = x ⊙ y | read x (LOAD), read y (MUL), write z |
| DOT | Σ x·y | read x (LOAD), read y (DOT) |
| NRM2 | Σ x² | read x (SQ) (square root left to software) |
| SCAL | x = αx | read x (SCALE α), write x |
| GEMV | spm[r] = A[r,:]·x | per matrix row r: read x (LOAD), read A row r (DOT); then a flush |

An operation is processed in batches of 128 beats, which is 1KB per chip: one
DRAM row, and the size of the PE buffer. Each batch runs the operation's phases in
order. Each phase streams one operand between DRAM and the buffer. The microcode
is a 4-word table per opcode (`ucode_rom` in `chopim_pkg`). Each word is
{last, write, operand, scalar select, PE action}.

Operand k starts at `base[k]` = (bank, row, column) and is contiguous in that bank:
beat i sits at linear column `{row,col} + i`, so it moves to the next row after
column 127. Software has to place vectors this way, with the same layout in every
chip of the rank. An operand flagged in `spm` lives in the scratchpad instead. It
may be at most one batch long, and its accesses take one cycle each and use no DRAM
command.

At launch, every operand the microcode uses is checked against its `bound`, the last
row it may touch. An operation that would cross a bound is rejected with
`done`+`err` and makes no access. So is an unknown opcode, a zero length or an
over-long scratchpad operand.

After a phase that read DRAM, the sequencer waits `DRAIN = tCL + 2` cycles, so that
all data has returned and gone through the PE before the buffer is read again or
`done` is reported.

GEMV takes `nrows` (1 to 128) matrix rows. They are stored one after another as
operand 1, so row r starts `r·nbeats` beats after the base. For each row the
sequencer runs the DOT phases over all batches. After the drain it presents one
*flush* access: a scratchpad access that makes the PE write its two lane sums into
scratchpad entry r and clear them. The result vector of up to 128 rows therefore
fills the 1KB scratchpad exactly. Software moves it to DRAM with a COPY whose
source operand is the scratchpad. It then adds the two lanes and the eight chips of
each row, and the ranks if the columns were split across ranks. The bound check
covers the whole matrix (`nrows·nbeats` beats).

## Processing element (`pe`, `fp32_fma`, `pe_sram`)

A beat is 8 bytes, which is two binary32 lanes, each with its own fused
multiply-add unit. The PE has three operand scalars (α, β, γ, loaded at launch), two
lane accumulators (cleared at launch), a 128×64-bit buffer and a 128×64-bit
scratchpad. Actions, per lane: LOAD buf=d, SCALE buf=s·d, FMA buf=s·d+buf,
MUL buf=buf·d, DOT acc=buf·d+acc, SQ acc=d·d+acc.

The buffer write and the accumulator update take place one clock after the beat.
The SRAMs have a synchronous write and an asynchronous read. In a write phase, the
buffer entry named by the sequencer goes out on `dram_wdata` together with the WR
command. The dice apply the write latency, and the rank table accounts for tCWL.

`fp32_fma` rounds once, to nearest with ties to even. Subnormal inputs count as zero
and subnormal results are flushed to zero. Every NaN case returns 0x7FC00000, and
overflow returns ±Inf. The whole unit is combinational. A real implementation
would pipeline it, and the sequencer's `DRAIN` would have to grow by the same
number of stages.

## Address mapping and bank partitioning (`host_addr_map`)

The base map follows the layout of recent Intel server parts:

* bits 5:0: line offset
* column: `{pa[14:11], pa[8:6]}`
* row: `pa[34:19]`
* channel, rank, bank-group and bank bits come from `pa[10]`, `pa[18]`,
  `pa[15]`, `pa[9]`, `pa[17:16]`, each XOR-ed with a low row bit

The exact XOR pairs are a representative choice.

Partitioning reserves the top `NDA_BANKS` bank IDs of every rank for NDA data. The
OS places data shared with the NDAs where the four most significant address bits
name a reserved bank. When exactly one of {hashed bank ID, top four address bits}
names a reserved bank, the mapper swaps the two fields. As a result:

* host-only data never reaches a reserved bank;
* shared data always does;
* the map stays one-to-one.

The swap is controlled by `bp_en`.

## Launching (`nda_controller`)

Software posts `{rank, packet}` into a per-rank FIFO (`QDEPTH` = 4). When a rank's
NDAs are idle and its FIFO is not empty, the rank is eligible, and eligible ranks
are offered round-robin on `launch_valid`. The host memory controller grants a
launch in a cycle in which it does not use the C/A bus. The granted packet then
reaches the rank's chips and the replica in the same cycle. `done`/`err` per rank
tell software that an operation finished.

## Files and parameters

`rtl/chopim_pkg.sv` holds the geometry, the timing, the command, packet and
microcode types, and the microcode table. There is one module per file:
`fp32_fma`, `pe_sram`, `pe`, `rank_state`, `stochastic_issue`, `nda_fsm`,
`nda_mc`, `nda_sched`, `nda_chip`, `next_rank_predictor`, `host_addr_map`,
`nda_controller`, and the top `chopim_system`.

| parameter | default | meaning |
|---|---|---|
| `NCH` | 2 | channels |
| `NRANKS` | 2 | ranks per channel (≤ 4) |
| `NCHIPS` | 8 | x8 chips per rank |
| `NDA_BANKS` | 1 | reserved banks per rank |
| `QDEPTH` | 4 | launch FIFO depth per rank |
| `nda_fsm.BATCH_BEATS` | 128 | beats per batch (1KB per chip) |
| `stochastic_issue.SEED` | 0xACE1 | coin seed (must match on both sides) |

DRAM geometry: 16 banks, 64K rows and 128 columns of 8 bytes per chip (8Gb x8).
The total capacity is 32GB, with 512MB per rank reserved for NDA data by default.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_fp32_fma` | directed special cases and random exact-reference cases, including cancellation |
| `tb_pe_sram`, `tb_pe` | storage; every PE action against a reference |
| `tb_rank_state` | every ready flag, every cycle, against timing rules computed from issue times |
| `tb_stochastic_issue` | LFSR sequence and pass rate |
| `tb_nda_fsm` | access order and addresses of every opcode, drain length, done timing, rejections |
| `tb_nda_mc` | issue decisions against a reference, over random states |
| `tb_nda_sched` | legality of every command with a random host sharing the rank |
| `tb_nda_chip` | all opcodes on data against a DRAM-dice model, with host traffic and all throttling modes; streaming rate of one column access per tCCD |
| `tb_next_rank_predictor`, `tb_host_addr_map` | inhibit rule; one-to-one mapping and partitioning |
| `tb_nda_controller` | FIFO order, back-pressure, round-robin, inhibit pins |
| `tb_chopim_system` | the full default-size system (32 chips) |

`tb_chopim_system` adds a host memory controller model, DRAM dice and software. It
runs four phases (no throttling, stochastic, next-rank prediction, partitioning off)
and checks every result on every chip. It requires each mechanism to occur at least
once:

* yields
* stochastic and inhibit holds
* host closing an NDA row
* queued launches
* round-robin switches
* remaps
* scratchpad operations
* GEMV operations
* rejected operations

It runs in about 1.5 minutes.

The testbenches use operands with 7-bit significands and small exponents. With
such operands the double-precision reference is exact before its final rounding.
`fp_ref_pkg` and `nda_ref_pkg` hold the reference arithmetic, and
`dram_chip_model` is a simple DRAM-dice model.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
  rtl/chopim_pkg.sv tb/fp_ref_pkg.sv tb/nda_ref_pkg.sv tb/tb_nda_chip.sv \
  --top-module tb_nda_chip -o sim && ./obj_dir/sim
```

## Where this RTL departs from or goes beyond the description it follows

* The 5-register PE state is split as three scalars and two lane accumulators.
  The final reduction of the two lanes and of the eight chips, and the square root
  of NRM2, are left to software.
* One description of AXPY accumulates `a += αX`. The operation table, which is
  followed here, defines y = αy + x. The accumulating form, used to sum scaled
  rows into a vector that stays in the scratchpad, maps onto AXPBY: x = the row in
  DRAM, y = z = the scratchpad vector, β = 1. This costs two roundings instead of
  one.
* "Host commands first over NDA row commands to the same bank" is implemented as
  a rank-wide rule: the NDA yields every cycle the host uses the rank. The NDA
  cannot see the host queue without breaking the replica rule.
* There is no separate NDA write queue. The 1KB PE buffer plays that role: a
  batch's results are written back in one write phase (`in_write`).
* GEMV leaves its row results in the scratchpad (see above). The final reduction
  is left to software. Macro operations that reorder loops through the scratchpad
  are the job of software too.
* The launch packet is a single-cycle transfer of a wide struct. Writing NDA
  control registers through reserved addresses is not modelled.
* The FMA is combinational (see above). Bank groups, tFAW, refresh and power are
  not modelled.
* Address-map XOR pairs, microcode encoding, launch FIFO depth, the drain count,
  the bound check at launch and the coin's LFSR are this design's choices.

Every `assert` uses `disable iff (!rst_n)` on an asynchronously reset design, so
Verilator reports `rst_n` as used both synchronously and asynchronously. That
warning is expected.
