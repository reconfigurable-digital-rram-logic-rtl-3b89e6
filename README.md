# Digital RRAM compute-in-memory with in-situ kernel pruning

Resistive memory (RRAM) arrays are usually used for compute-in-memory in the
analogue domain: weights are conductances, inputs are voltages, and column
currents are digitised by ADCs. This design does the opposite. Every array
operation is digital: a selected row of 1T1R cells is read bit by bit against a
reference resistance, and a small precharged logic cell under each column
combines the read bit with the column's input in one of four ways (NAND, AND,
XOR, OR). AND of an input bit with a weight bit, shifted and added, gives
multiplication; XOR of two stored kernels, counted, gives their distance. The
same stored weights therefore serve both the forward computation of a neural
network and the similarity search that decides which kernels are redundant and
can be pruned while the network is still training. No ADC or DAC is needed.

The RTL here describes the whole system: the two RRAM blocks and their
readout as behavioural models, and the drivers, reconfigurable logic, shift-
and-add, accumulation, pruning and sequencing as synthesizable
SystemVerilog.

## System structure

```
           cmd / resp                hadamard (2 x 128 b)   vmm (64 x 32 b)
               |                          ^                     ^
        +------v----------------+         |                     |
        | cim_controller        |----> sa_group x2 ------> accumulator
        |  (pass sequencer,     |         ^
        |   write-verify, DIST) |         | OUT[63:32] (Block Two), OUT[31:0] (Block One)
        +--+------+------+------+         |
           |      |      |     +----------+-----------+
     repair_map  bsic   wrc    | per block:           |
           |      |BL    |WL   |  rram_array 512x32   |
           |      +------+---->|  rref_read (Vtran)   |
           |             |K,op |  reconfigurable_unit |<-- INR/INL from input_logic
           |             +---->+----------------------+
        prune_unit <--- distances; prune_mask ---> lane masking
```

* **rram_array** (x2, Block One and Block Two): 512 word lines x 32 bit
  lines, 2 bits per cell (four conductance levels). Both blocks share the word
  lines and the bit lines, so every operation works on the same row of both
  blocks with the same inputs and yields 64 output bits.
* **bsic**, the bit-line/source-line driver and input controller: in
  programming mode it decodes one bit line and passes a set or reset pulse to
  one block; in computing mode it drives the input vector X onto all 32 bit
  lines.
* **wrc**, the word-line driver and RU controller: a one-hot shift register
  selects the row (start = row 0, shift = next row), and a small phase
  generator runs each operation as one precharge clock and one compute clock,
  latching K and the operation in the precharge clock.
* **rref_read**: per column, the cell forms a divider with a tunable
  reference; the output is 1 when the cell's resistance is below the
  reference. Three reference settings (Vtran1..3) sit between the four levels.
* **input_logic** and **reconfigurable_unit** (RU): see the next section.
* **sa_group** (x2, one per block) and **accumulator**: rebuild INT8 or
  binary-weight products and sum them over rows.
* **prune_unit**: the pruning rule. **repair_map**: faulty rows to a backup
  region. **cim_controller**: everything is sequenced from one command
  interface.

## One operation: the reconfigurable unit

A column sees three bits: the input X on its bit line, the stored bit W (as
read against the selected reference), and K. A column whose bit line is not
driven carries no read current and reads as 0, so the readout delivers
XW = X AND W. The output is

| X W K | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|-------|-----|-----|-----|-----|-----|-----|-----|-----|
| NAND  | 1 | 1 | 1 | 1 | 1 | 1 | 1 | 0 |
| AND   | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 1 |
| XOR   | 0 | 1 | 0 | 1 | 0 | 1 | 1 | 0 |
| OR    | 0 | 1 | 0 | 1 | 0 | 1 | 1 | 1 |

i.e. OUT = (X AND W) op K. The RU cell is a precharged node with two
pull-down branches, enabled by INR and INL:

    OUT = NOT( (XW AND INR) OR (NOT XW AND INL) )

and the input logic sets the branches from K:

| operation | INR | INL |
|-----------|-----|-----|
| NAND, AND | K   | 0   |
| XOR       | K   | ~K  |
| OR        | 0   | ~K  |

NAND and AND share the setting; AND is the inverted output. This discharge
equation is the only one consistent with both tables; it is a functional
model of the cell, not a transistor netlist. In RTL the dynamic node is a
flip-flop: set to 1 in the precharge clock, cleared where a branch conducts in
the compute clock.

**Timing of a pass.** `fire` in clock t, precharge in t+1 (K and the
operation latched), compute in t+2, result readable in t+3. The next `fire`
may be in t+2, so passes issue every two clocks and the result of one pass is
consumed in the precharge clock of the next.

## Multiplying INT8 numbers with single-bit passes

This is the least obvious part of the design. An INT8 weight occupies four
adjacent columns of one row (a *lane*); cell c holds weight bits [2c+1:2c] as
a level 0..3. A block row therefore holds 8 weights, both blocks 16.

Reading a cell against reference n gives the bit (level >= n). Summed over
n = 1, 2, 3 these bits give the level itself (a thermometer code). So for
input bit i, three AND passes (references 1, 2, 3) with x_i on the lane's bit
lines give, per cell, x_i * level_c, and the S&A group adds

    sum over c of  OUT[4l+c] << 2c,   shifted left by i

for every lane l. After all 3 x in_bits passes the lane holds x * u, where u
is the weight read as an unsigned number. Two corrections make it signed:

* Weight: bit 7 of the weight is (level_3 >= 2), exactly the reference-2
  read of the top cell. On every reference-2 pass the top cell's output is
  also subtracted at weight 256, turning x*u into x*w with
  w = u - 256*bit7.
* Input: for signed inputs the passes of the input's top bit are
  subtracted instead of added.

Products are 16 bits; 8 lanes x 16 bits is the 128-bit output of each S&A
group. An 8-bit MAC of one row takes 24 passes, 2*24 + 5 = 53 clocks from
command to response when the row is already selected. With `acc_en`, the
accumulator then adds each lane's product into its 32-bit word: over
successive rows (one input element per row) this is a vector-matrix product
with one kernel per lane. Inputs may have 1 to 8 bits, signed or unsigned;
1-bit unsigned inputs give the binary-input case. INT8 kernel l of block b
accumulates into word b*8 + l.

## Binary weights: one weight per cell

Binarised networks need only one bit per weight, so the `wbin` flag of MAC
and DIST switches to a denser layout: each cell holds a weight 0 or 1
(levels 0 and 1), read with reference 1 only, and every column is its own
lane, so a block row holds 32 weights and a kernel is a column. Each column c
gets its own input `xb[c]` (unsigned, `in_bits` <= 4 bits); one AND pass per
input bit, and the S&A group adds each column's output shifted by the bit
index into a 4-bit field. The 32 fields of 4 bits again fill the 128-bit S&A
output, and the accumulator has one word per column (word b*32 + c), 64 in
all, so a column summed over rows is a binary kernel's dot product. A MAC
with 4-bit inputs takes 4 passes (2*4 + 5 = 13 clocks). DIST with `wbin` runs
one read and one XOR pass per row on single columns and returns the Hamming
distance. Kernel ids for pruning are `kbase + block*32 + column`.

## Search-in-memory: kernel distances

To compare kernel A (lane a, block p) with kernel B (lane b, block q) over a
range of rows, the controller runs, per row and per reference n:

1. an AND pass with all ones on lane b: the outputs are B's thermometer bits;
2. an XOR pass on lane a with K = those bits moved to lane a's columns.

The ones of the XOR outputs of lane a are counted. Summed over the three
references this is the sum over cells of |level_A - level_B| (the L1 distance
of the 2-bit levels), which for binary weights is the Hamming distance. Since
K for the XOR pass is taken straight from the RU outputs of the read pass in
the clock they become valid, the two passes still issue two clocks apart.

## The pruning rule

Each measured distance is offered to `prune_unit` with a threshold alpha. A
pair whose distance exceeds alpha enters the candidate list; the unit keeps
the list as per-kernel counters (both kernels of the pair are counted). A
PRUNE command with a threshold beta prunes every kernel whose count exceeds
beta, sets its bit in a sticky mask and clears the counters for the next
round. Pairs that involve an already pruned kernel are ignored.

With the 6 x 6 example of kernels 0, 1, 4, 7, 9, 11 where the pairs (0,9),
(1,7), (4,7), (7,9) are over the threshold, kernel 7 appears three times and
is the only one pruned with beta = 2; the testbench checks exactly this.

A pruned kernel's lane is masked in the S&A group and the accumulator; when
the kernels of lane l are pruned in both blocks, lane l's bit lines are no
longer driven at all. Kernel ids are `kbase + block*8 + lane` for INT8 weights, so one mask of
128 kernels can cover several row bands (layers).

## Programming, forming and repair

* FORM gives every cell a random level (the random initial weights).
* PROG is write-verify: read the cell with the three references, compare
  with the target, apply one set (up) or reset (down) pulse, and repeat; after
  `MAX_ITER` = 8 pulses without success `err` is returned. The array model
  moves a cell one level per pulse.
* READ returns one cell's level.
* REPAIR maps a logical row to one of 16 backup rows at the top of the array
  (physical rows 496..511); all later accesses to that row go there.

## Command interface

`cmd_valid`/`cmd_ready` (ready only when idle) and a one-clock `resp_valid`.
The command is the packed struct `cim_cmd_t` of `cim_pkg`:

| op     | fields used                                  | response |
|--------|----------------------------------------------|----------|
| FORM   | -                                            | - |
| PROG   | blk, row, col, level                         | level, err |
| READ   | blk, row, col                                | level |
| LOGIC  | row, lop, ref_sel (1..3), x, k               | raw (64 bits) |
| MAC    | row, xv (8 x 8 bits), in_bits, x_signed, acc_en, kbase; wbin with xb (32 x 4 bits) | `hadamard` port |
| ACCCLR | -                                            | - |
| DIST   | row, nrows, wbin, blk_a/lane_a/id_a, blk_b/lane_b/id_b, thresh (alpha) | distance |
| PRUNE  | thresh (beta)                                | `prune_mask` port |
| REPAIR | row, rep_idx                                 | - |

Moving the word line costs one clock per row upwards and a restart from row 0
downwards; sequential rows are cheap, random access is not.

## Where this departs from the paper or fills gaps

The system blocks, the array size, the four operations and their
truth/INR-INL tables, 2-bit cells, four cells per INT8 weight, the 128-bit S&A
outputs, write-verify programming, XOR-based distance and the pruning rule
follow the paper. The following are this design's own:

* One clock per precharge and per compute phase.
* The three references as thresholds between adjacent levels, and the
  thermometer reading of a 2-bit cell.
* The bit-serial shift-and-add scheme and its two's-complement corrections.
* The binary-weight layout (one weight per cell, 4-bit products, inputs of at
  most 4 bits). The paper says binary and 2-bit values are told apart by the
  read thresholds and uses binarised weights for its image network, but does
  not give the layout or the input precision. Its mapping figure shows each
  kernel spread over a group of adjacent columns of one block; here a binary
  kernel is a single column.
* One kernel per lane; per-lane accumulation; all widths of S&A, accumulator,
  counters and distances.
* The command set and the pass scheduling of the controller.
* The pruning rule is used as stated (distance *above* alpha enters the list),
  even though the paper's similarity figure describes the marked pairs as
  highly similar; alpha can be chosen accordingly.
* Only row replacement into a backup region is built. The paper also
  reserves two of every 32 cells as spares; here all 32 columns of a block
  row hold data (eight INT8 weights), so there is no room for them in this
  layout, and they are not modelled.
* A kernel must fit in one lane or column, at most 512 weights; longer
  kernels have to be split by the host, which then adds the partial sums.
* Analogue behaviour (forming voltages, pulse shapes, drift, device
  variation, bit errors) is not modelled; the array model is ideal.
* Activation, pooling and weight updates of training happen outside, as
  in the paper, where they run on an FPGA.

## Capacity against the networks

At the default size the system holds 8192 INT8 weights (16 lanes x 512 rows)
or 32768 binary weights (64 columns x 512 rows). The first PointNet++ layer
(64 filters of 3 weights) fits in 12 rows; its first two layers (4288
weights) fit together. The three SA1 layers (12480 weights) do not. Of the
binarised image network, the first two convolution layers (32 kernels of 9
and 64 kernels of 288 weights) fit together in 297 rows; the third layer's
kernels have 576 weights, more than a column's 512 rows, and must be split.
Anything larger is loaded in parts and reprogrammed.

## Files

* `rtl/cim_pkg.sv` sizes, the operation and command enums, command and
  response structs.
* `rtl/rram_array.sv`, `rtl/rref_read.sv`: behavioural models of the analogue
  parts (they compile and simulate, but are not meant for synthesis).
* `rtl/input_logic.sv`, `rtl/reconfigurable_unit.sv`, `rtl/bsic.sv`,
  `rtl/wrc.sv`, `rtl/sa_group.sv`, `rtl/accumulator.sv`, `rtl/prune_unit.sv`,
  `rtl/repair_map.sv`, `rtl/cim_controller.sv`: synthesizable blocks.
* `rtl/rram_cim_top.sv`: the top level.
* `tb/<module>_tb.sv`: one self-checking testbench per module; each ends by
  printing `TB_RESULT checks=N failures=M`.

## Simulating

Each testbench is self-contained. For example, the end-to-end test at the
default size:

    verilator --binary --timing --assert -y rtl -Irtl --top-module rram_cim_top_tb \
        rtl/cim_pkg.sv tb/rram_cim_top_tb.sv
    ./obj_dir/Vrram_cim_top_tb

It forms the arrays, programs INT8 weights into four rows of both blocks
with write-verify, checks Hadamard products (signed 8-bit and binary inputs)
and a four-row VMM against integer arithmetic, checks all four logic
operations, measures the distance of all 120 kernel pairs, prunes, checks the
masked computation, programs binary weights and checks their products, VMM
and Hamming distances, and repairs a row. It counts each mechanism (forming,
set and reset pulses, each logic operation, word-line restarts and shifts,
row repair, list entries, pruning, lane masking, bit-line gating, binary
weights) and fails
if one never occurs. It runs in well under a second. The other testbenches
are built the same way with their own top module.

## How far to trust it

All testbenches pass with Verilator 5, and every file in `rtl/` also
elaborates with the slang front end of Yosys. Each block testbench has been
shown to fail on a deliberately broken copy of its module. The expected
values are computed independently in the testbenches (integer products and
sums, the truth table, distances of levels). What is not verified is
anything the paper leaves open at circuit level: the real phase timing of
the dynamic logic, the actual reference levels, and how the paper's chip maps
weights to cells.
