# A CAM-based automata processor bank

This RTL implements a bank of a non-deterministic finite automaton (NFA)
processor built from content-addressable memory. Each input symbol is
handled in one clock cycle, in two steps:

1. **State matching.** A CAM compares the encoded symbol against the symbol
   class of every state. Each state is a homogeneous "state transition
   element" (STE) that carries one class. Only states that were enabled by
   the previous cycle take part.
2. **State transition.** An SRAM crossbar maps the set of matched states to
   the set of states enabled for the next symbol.

The bank holds 65,536 STEs: 16 arrays × 8 tiles × 2 sub-arrays × 256 STEs.
Reports (a matched state that is marked as accepting) go to an output
buffer that the host reads.

## Matching with an 8T SRAM used as a CAM

Each sub-array is 256 entries × 16 bits (`rtl/cama_cam.sv`). The read
word-line of an 8T cell is the search line, and its read bit-line is the
match line. A match line discharges only when a cell stores 1 *and* its
search line is 1. So a stored 1 demands a 0 on that search line, and a
stored 0 means "don't care".

The symbol encoder (`rtl/cama_encoder.sv`, 256 × 32) holds the inverted code
of each symbol, so the search lines are `~code(symbol)`. One entry stores
the AND of the codes of every symbol in its class. It matches exactly that
class as long as the code makes the AND-ed word reject every other symbol.
Zero-count codes are used for this: a symbol's code has a fixed number of
0 bits.

The testbenches use a 16-bit "two-zeros prefix" code:
- a 10-bit prefix with two zeros (45 patterns);
- a 6-bit suffix with one zero.

Symbols that share a prefix form cheap classes. Three more features come
from the array:
- **Enable.** The column precharger serves as the enable. A state that was
  not activated cannot match (`match = en & ...`).
- **Mask.** A per-sub-array mask switches search bits off.
- **Negation.** An inverter on each entry's match line turns a class into
  its complement, which keeps large classes cheap.

Per entry:
`match = gate_off | en & (~|(stored & sl & ~mask) ^ neg)`.

## The reduced crossbar (the hardest part)

Each sub-array drives a 128 × 128 8T SRAM local switch (`rtl/cama_rrcb.sv`).
It can be set up in one of two ways.

**Full crossbar (FCB).** A full 128 × 128 crossbar over 128 states.

**Reduced crossbar (RCB).** Serves 256 states whose transitions stay within
about ±21 positions (modulo 256). This is the common case once states are
ordered well. The trick is to reuse the 128 × 128 cells for a diagonal
band of a 256 × 256 matrix:

- The word lines are cut into three segments of 43, 43 and 42 columns.
  Each segment is driven by its own 128 source states, which gives 384
  inputs in all.
- Every read bit-line is cut in two, so each column gives two outputs
  (256 in all).

For column x of a segment, the cut lies at row 43 + x. Segment k, row r
carries source state `(base_k + r) mod 256`, with base = 21, 107, 193.
The lower half of column x drives destination `42+x` / `128+x` / `214+x`,
and the upper half drives `85+x` / `171+x` / `x`, for banks 0, 1 and 2.

This wiring gives each destination d the sources d-21 … d+21. The
exception is the 42 destinations below 42: they get sources d-20 … d+21.
The band test in `tb/tb_cama_rrcb.sv` measures this by probing every cell.

The functions `rrcb_src`, `rrcb_dst_lo`, `rrcb_dst_hi` and `rrcb_split` in
`rtl/cama_pkg.sv` give the mapping. `tb/cama_tb_pkg.sv` has `rrcb_cell`,
which finds the cell for a wanted transition.

In FCB mode all three segments of row r carry state r, and output c is the
OR of the two halves of column c.

Each switch also sends 16 states (240…255 in RCB mode, 112…127 in FCB
mode) to the array's 256 × 256 global switch (`rtl/cama_gswitch.sv`).
It receives 16 states back, ORed into next-state bits 240…255. The global
switch works in the same cycle as the local switches.

## Tile modes

A tile (`rtl/cama_tile.sv`) holds two sub-arrays and two switches. It has
three modes:

| mode | states | matching | transitions |
|---|---|---|---|
| 16-bit RCB | 2 × 256 | each sub-array separately | each switch as RCB |
| 16-bit FCB | 256 | sub-array 0; sub-array 1 gated off (its results read as 1) | switch 0 for sources 0–127, switch 1 for 128–255, both FCB |
| 32-bit | 256 | sub-array 0 on code[15:0] AND sub-array 1 on code[31:16] | as FCB |

**Start states.** A start mask is ORed into the enables. This models states
that are active on every input.

**Pipeline variants** (parameter `PIPELINED`):
- `0` (E, energy): the next-state register drives the CAM enables. Both
  steps fall in one cycle.
- `1` (T, throughput): the CAM is always enabled. A match-vector register
  splits the two steps, and its output is ANDed with the enables one cycle
  later. This shortens the critical path and adds one cycle of latency.

## Bank, buffers and reports

`rtl/cama_bank.sv` is the top. The datapath is:

input buffer (128 × 8 bits, interrupt when empty) → encoder (registered)
→ 16 arrays (`rtl/cama_array.sv`, 8 tiles plus a global switch each)
→ report unit → output buffer (64 entries, interrupt when full).

The report unit (`rtl/cama_report_unit.sv`) ANDs the active states with a
report mask for each partition. It writes one entry per cycle, in this
format:

`{cycle = symbol index, symbol, partition = (array·8+tile)·2+sub, state}`

If a symbol causes k reports, the bank stalls for k-1 cycles. It also
stalls while the output buffer is full. The host reads the buffer at any
index, then clears it. An entry that arrives in the clearing cycle is kept.

Configuration goes through one write port (`cfg_wr_t` in
`rtl/cama_pkg.sv`). It addresses:
- encoder words;
- CAM entries (code plus negate bit);
- switch columns;
- global-switch columns;
- start and report masks;
- each tile's mode and search masks.

## Capacity

One bank holds 65,536 states in 128 tiles. Take the per-benchmark switch
counts of common automata suites (ANMLZoo and Regex). Of 21 benchmarks,
15 fit in one bank: Brill, ClamAV, Fermi, TCP, Hamming, PowerEN,
Levenshtein, Bro217, the Dotstar0x and Ranges sets, BlockRings and
ExactMath. Dotstar, Protomata, Snort, SPM, RandomForest and
EntityResolution need 2 to 4 banks. Only a single bank is built here.

## What is modelled and what is not

**Logic only.** Bitcells, sense amplifiers, precharge and power gating are
modelled only by their logic. A gated sub-array reads as all 1s.

**Not included.** The software that chooses codes, clusters classes and
places states is not part of this design. Neither is the host.

**Own choices.** These are this design's, not taken from a published source:
- the registered encoder;
- the report entry widths and stall rule;
- the configuration port;
- the keep-on-clear behaviour of the output buffer;
- the combinational global switch.

**Known departure.** In one published drawing, the bit-line cut of the last
column is at row 86. This design puts it at row 85, so that every
destination keeps its ±21 band.

**Timing.** Timing and energy are not modelled. The E and T variants
differ only in the register placement described above.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert rtl/cama_pkg.sv rtl/*.sv \
      tb/cama_tb_pkg.sv tb/tb_cama_bank.sv --top-module tb_cama_bank
    obj_dir/Vtb_cama_bank +verilator+rand+reset+2

`tb_cama_bank` runs a reduced bank (2 arrays × 2 tiles) in both variants
against a reference NFA. It uses every mode, global transitions, negation,
masks, several reports per symbol and both interrupts.

`tb_cama_bank_full` runs the full-size bank (about 100 s to build, seconds
to run). It checks a pattern placed both locally and across the global
switch, and that the run takes one cycle per symbol plus one cycle per
extra report.
