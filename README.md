# Darwin: analytics operators inside a DRAM rank

Database scans, filters, aggregates, sorts, projections and joins spend most
of their time moving columns from DRAM to the CPU only to discard most of
them. This design puts the compute inside the memory module, at three levels
that each match one kind of work:

* **Bank level (BPU).** Next to every bank sits a small SIMD engine that
  consumes the bank's 32-byte column accesses at full internal bandwidth.
  It runs the *regular* operators, whose access pattern is known in advance:
  select (compare to a bitmask), aggregate (sum/min/max) and the
  compare-exchange stages of a bitonic sort. All banks of a group run the
  same command in lock step.
* **Bank-group level (BGPU).** The *irregular* operators, project and the
  merge phase of a sort-merge join, read and write addresses that depend on
  the data. A BGPU per bank group generates its own DRAM commands for these,
  so the host does not have to know the control flow.
* **Rank level (rank buffer).** The buffer chip of a load-reduced DIMM splits
  the host's 64-byte writes into one instruction per chip ("concatenated
  instructions"), moves data between chips, and lets the host read results.

The host never issues DRAM commands for PIM work. It sends 64-bit PIM
instructions, eight per 64-byte write, and each bank group turns the ones
carrying its thread ID into DRAM commands that a per-chip scheduler issues
under the DRAM timing rules.

Default size (`darwin_top` parameters): 4 chips x 4 bank groups x 4 banks =
64 banks, 16 bank-group threads. Each bank is 16384 rows x 64 columns of
32 bytes (2 KiB rows, 32 MiB per bank, 2 GiB per rank). The cell arrays are
*not* part of the RTL; each bank is a port triple (command out, write data
out, read data in) that a memory model or a real array attaches to.

## Hierarchy

```
darwin_top                      one rank
  rank_buffer                   instruction demux, inter-chip buffer, host read-out
    dq_aligner                  16 x 32-bit beats -> 8 x 64-bit beats
  darwin_chip  x4               one DRAM die
    pim_cmd_scheduler           DRAM timing, open-row policy, per die
    bg_controller x4            one per bank group
      sync_fifo                 instruction buffer / command queue
      pim_inst_decoder          instruction -> PIM commands
    bgpu x4                     one per bank group
      pim_cmd_generator         DRAM commands of project / join
      project_unit, join_unit, sync_fifo (8 x 32 B output FIFO)
    bpu x16                     one per bank
      permute_unit x2, simd_unit, ope
    (chip buffer)               64 x 32 B register file inside darwin_chip
```

`darwin_pkg` holds the instruction formats, the internal command type and the
timing constants.

## Instructions and the concatenated write

A PIM instruction is 64 bits. The top six bits are the thread ID
(`chip*4 + group`), then a 2-bit category:

| category | fields (bit positions) |
|---|---|
| BPU (0) | op[55:52] row[51:38] col1[37:32] col2[31:26] src[25:23] dst[22:20] perm[19:17] nCMD[16:10] step1[9:5] step2[4:0] |
| BGPU (1) | op[55:54] bank[53:52] row[51:38] col[37:32] imm[31:0] |
| move (2) | op[55:54] bank[53:52] row[51:38] col[37:32] regidx[31:26] src[25:23] dst[22:20] pidx[19:12] nCMD[11:5] step1[4:0] |

A BPU instruction expands into nCMD (0..64) commands to all four banks of the
group; command k uses columns `col1 + k*step1` and `col2 + k*step2` (steps
signed, addresses wrap at 64). `src` picks operand 1 (memory, row register A,
OID register A, ...), operand 2 is always a slot of row register B, `dst`
picks where the result goes (row registers, OID registers, bitmask, memory).
Operations: ADD, SUB, MUL, MIN, MAX, SORT (compare-exchange with a permute
pattern `perm`), CMP_LT/GT/EQ (writes 8 bitmask bits per access), LOAD,
STORE.

A move instruction copies nCMD 32-byte words between a bank and the BGPU
vector registers, the chip buffer or the rank buffer; `regidx` is the first
register/buffer index and advances by one per word. ACT opens a row ahead of
time; NOP does nothing.

BGPU instructions configure and start project/join:

| op | meaning |
|---|---|
| SETUP_IN | input bank/row/col; imm = OID of the first tuple |
| SETUP_OUT | output bank/row/col |
| SETUP_NUM | second input address; imm = tuple count (join: nR in [5:0], nS in [21:16]) |
| START | imm[0]=0 project, 1 join; imm[1]=1 project from an OID list instead of a bitmask |

**Concatenated instructions.** The host writes eight instructions as one
64-byte burst of eight 64-bit beats. Each chip owns 16 data pins, so the
instruction for chip c travels as four 16-bit slices on lane c:
beat b, lane l carries bits `[16*(3-b%4) +: 16]` of instruction
`4*(b/4) + l`. The rank buffer collects the four slices and hands chip c
instructions c and c+4, one per half burst. Before each burst the host must
see `ready` high: every bank group has room for two instructions and no BGPU
is busy. That is the whole host-side protocol; the count of cycles spent
waiting on `ready` is the cost of letting the memory run data-dependent work.

## Bank processing unit

Per bank: row registers A and B (128 B = four 32-byte slots each), a 512-bit
bitmask, and the OID processing engine (OPE) with OID registers A and B of
the same shape. The data path per command is

```
operand1 (bank / rowA / oidA) --permute-- SIMD (8 x 32-bit) --mux-- permute --> dst
operand2 (rowB slot)          --permute--/
```

Arithmetic is 32-bit signed integer; multiply keeps the low 32 bits.

**Sort.** Sorting 16 keys held in two slots (A and B) is a bitonic network.
One SORT command permutes the sixteen keys of both slots with a pattern
(`perm` 0..6: the partner of element i is i XOR 1, 3, 2, 7, 4, 15 or 8,
the seven stage shapes of a 16-element bitonic sorter in half-cleaner form),
compares lane by lane, swaps where operand 1 is greater, and permutes back. The OPE applies exactly the same
gather/swap/scatter to the OIDs in the OID registers, using the SIMD unit's
swap flags, so every key stays paired with its OID without extra
instructions. A full 16-element sort is a short, fixed instruction sequence
the host builds; longer runs are merged by the BGPU join/merge path or by
further passes.

**Select.** CMP over a row writes 8 bits per column access at bit
position `8*col1`, so one pass of 64 accesses fills the 512-bit bitmask
for 512 tuples. STORE writes a register slot, or one 256-bit half of the bitmask, back to
the bank.

**Aggregate.** ADD/MIN/MAX with operand 1 from memory and destination row
register B accumulates eight partial results per bank; the host (or a second
pass) reduces the eight lanes.

## Bank-group processing unit: project and join

This is the part with data-dependent control flow and the most involved
timing.

**Project.** Vector register A holds a 512-bit bitmask (or 32 OIDs in OID
mode). The PIM command generator walks the input attribute: for each
32-byte column it knows from the bitmask which of the eight tuples survive.
Columns with no survivor are skipped entirely (no read). The project unit
packs survivors in order; each full 8-tuple word goes into the 8-entry output
FIFO. In OID mode each OID names one tuple: the generator reads the column
that holds it and selects one lane.

The generator interleaves reads and writes under two rules:

* Read credit: a read is issued only if `FIFO entries + reads in flight + 1
  <= 8`, so data already on its way can never overflow the FIFO.
* Write bursts: when the FIFO is full it is drained as one burst of eight
  writes (256 B), back to back, so the bank group does not pay a read/write
  turnaround per word. At the end the remainder is written.

Output word k of a project goes to bank `out_bank + k mod 4` at linear
address `(out_row, out_col) + k/4`, i.e. successive words rotate over the
group's four banks, which lets row activations overlap.

**Join.** The sort-merge join assumes both relations are already sorted
(by the BPU sort). Keys of R go to vector register A, keys of S to B (32 x 4
bytes each), and the OIDs into the join unit's own registers. The join unit
has two cascaded comparators, so it performs two merge steps per cycle. On
equal keys it emits the pair (R OID, S OID) and advances S only (each S tuple
matches at most one R tuple, a foreign-key join); otherwise the smaller side
advances. Pairs leave four per 32-byte word into the output FIFO. Inputs are
read as four key columns followed by four OID columns for each relation.

**Limits.** One START handles at most 512 tuples (project with bitmask), 32
OIDs (project with OID list) or 32 + 32 tuples (join). Larger inputs need
more START instructions from the host with updated addresses. The paper's
join controller refills the inputs while merging; here the inputs are loaded
first and then merged.

## Bank-group controller

Every chip offers each instruction to all its bank-group controllers; each
keeps the ones whose ID matches. Instructions are buffered, decoded into
PIM commands and placed in a 16-entry command queue, which the BGPU's
generator shares (generator first). While a project or join runs, no further
instruction is decoded. A BGPU setup/start instruction is decoded only after
all earlier commands have executed, so a START sees the vector registers
that earlier moves filled.

## Command scheduler and timing

One scheduler per chip watches the head of the four command queues. It keeps
the open row of every bank and counters of elapsed cycles since each event:

| constraint | cycles (500 MHz) |
|---|---|
| tRCD activate -> column | 12 |
| tRAS activate -> precharge | 27 |
| tRP precharge -> activate | 12 (not given; taken equal to tRCD) |
| tRRD activate -> activate (chip) | 5 |
| tFAW four-activate window | 16 |
| tCCD_L column -> column (group) | 2 |
| read/write data latency RL | 4 (assumed) |

A column command to a closed row makes the scheduler precharge (after tRAS)
and activate (after tRP, tRRD and tFAW) on its own; the policy is open-row.
BPU commands target all four banks of a group at once and count as one
activation. At most one activate per cycle per chip is granted, round robin
over groups. Each command is then delayed by RL in a per-group delay line so
that it reaches the BPU/BGPU in the cycle the bank returns (or samples) data.

## Chip buffer and rank buffer

Data moves between bank groups through the chip buffer (64 x 32 B per chip),
and between chips through the rank buffer (64 x 32 B). A move from a bank to
a buffer stores the word at the index in the instruction; a move from the
rank buffer to a bank can reorder the word's four 8-byte quarters with an
8-bit permute index (quarter k of the output = quarter `pidx[2k+1:2k]` of the
input). The host reads the rank buffer with `host_rd_req`/`host_rd_idx`: two
buffer words go out as sixteen 32-bit beats through the DQ aligner, which
reassembles eight 64-bit beats for the host bus.

Ordering across bank groups and chips is left to the host: it waits until one
group's results are in place (e.g. `project_done`, or `ready` with an idle
machine) before instructing another group to use them.

## Verification

Each module has a self-checking testbench in `tb/` that compares against a
reference model in the testbench and ends with a `TB_RESULT checks=N
failures=M` line. `tb/dram_bank_model.sv` is a behavioural bank array with
the same latency RL and a back-door port that testbenches use to load and
inspect data.

`tb_darwin_top` runs the full 4 x 4 x 4 rank at default parameters and
exercises every mechanism end to end through the host pins: concatenated
instructions, select into bitmasks, sum and min aggregates, 16-element
sorts with OIDs, bitmask and OID-list projects, a join, chip-buffer and
rank-buffer moves, host read-out, row conflicts, tFAW/tRRD stalls and the
`ready` handshake. It takes about a minute with Verilator.

Run any testbench with plain Verilator:

```
verilator --binary --timing --assert rtl/darwin_pkg.sv $(ls rtl/*.sv | grep -v darwin_pkg) \
    tb/dram_bank_model.sv tb/tb_darwin_top.sv --top-module tb_darwin_top -o sim
./obj_dir/sim
```

## Where this design departs from the paper or fills gaps

* Chip count. The evaluation table uses one GDDR6 package per rank (two
  16-pin pseudo-channels), while the rank figure shows four chips behind a
  buffer chip. The RTL builds the figure: four chips with 16 data pins each.
  `NUM_CHIPS` is a parameter.
* RL = 4 cycles and tRP = tRCD are assumptions; the paper gives neither.
  tCCD_S (different bank groups) is not enforced, since groups have separate
  internal data paths in this model.
* Instruction field positions follow the published layout; the opcode
  encodings, operand location codes and the BGPU setup immediates are this
  design's own.
* Join input limited to 32 + 32 tuples per START without refill during the
  merge; project limited to 512 tuples (bitmask) or 32 OIDs per START.
* Chip buffer and rank buffer depth 64 words (not given).
* `ready` includes "no BGPU busy", which is conservative: it stalls the host
  during any project/join in the rank.
* Group-by (needed for TPC-H Q1) has no dedicated unit; it has to be composed
  from select, project and aggregate instructions.
* The buffers' storage is not reset; they hold whatever was last written,
  and readers only read what was written.
* Cross-group and cross-chip ordering is the host's job (see above).

## Capacity against the evaluated workloads

At 4 bytes per value, the paper's largest inputs are 8,388,608 tuples (32 MiB
per attribute) for the single operators and two such relations for the join
(keys and OIDs 128 MiB, output pairs 64 MiB). The rank addresses 64 banks x
16384 rows x 64 x 32 B = 2 GiB, so all evaluated inputs fit in capacity. Per
bank-group thread that is 524,288 tuples, i.e. 1024 project STARTs of 512
tuples, or about 16,384 join STARTs of 32 + 32 tuples.
