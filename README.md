# FAST SRAM: updating every row of a memory array in one pass

An ordinary SRAM can touch one row per access. If every entry of a table must
be changed a little (add a delta to every counter, update every feature of a
graph vertex), the rows go through the port one by one: read, compute, write,
N times. The latency grows with the number of rows.

FAST turns the problem around. Every SRAM cell can pass its bit to its right
neighbour, so each row is a circular shift register. A 1-bit ALU sits in each
row's loop, between the last (LSB) cell and the first (MSB) cell. Shifting a
q-bit word q times sends each of its bits through the ALU once, LSB first; if
the ALU is a full adder fed one operand bit per step, the word has been
replaced by word + operand when it comes back to its place. All rows do this at
the same time, so a batch update of the whole array costs q steps, whatever the
number of rows. The array keeps its ordinary row-by-row read and write port.

This repository holds synthesizable SystemVerilog for such a macro at the size
of the published test chip, 128 rows by 16 columns, together with phase-level
behavioural models of the two circuits that make it work (the shiftable cell
and the carry latch) and self-checking testbenches for all of it.

## Organisation

```
              host (CPU / FPGA)
                    |  instructions, data, per-row operand bits
             +--------------+        +------------+
             | ctrl_decoder |------->| phase_gen  |-- phi1, phi2, phi2d, shift_en
             +--------------+        +------------+
               |        |                   |
        +-------------+ |                   v
        | row_decoder | |   +---------------------------------------------+
        +-------------+ |   | fast_array: 128 x fast_row                   |
               | wl     |   |  row r:  [c0 c1 ... c7]-ALU0-R-[c8 ... c15]-ALU1 |
               +--------+-->|          ^___ return line (MSB end) ______|  |
                            |  column read logic (bitlines + sense amps)  |
                            +---------------------------------------------+
```

| module | role |
|---|---|
| `fast_pkg` | opcodes, ALU operation, the `phase_t` bundle {phi1, phi2, phi2d}, phase states |
| `fast_cell` | one shiftable cell at register level: write from the bitline, or take the left neighbour's bit on a shift step |
| `fast_alu` | 1-bit full adder with a carry register, or pass-through |
| `fast_route_unit` | switch between two word segments: two short words or one long word |
| `fast_row` | 16 cells, two ALUs, one routing unit |
| `fast_array` | 128 rows, shared control, column read logic |
| `row_decoder` | address to one-hot wordline |
| `phase_gen` | sequence of the three shift control signals, one step at a time |
| `ctrl_decoder` | host instruction port |
| `fast_top` | the macro |
| `fast_cell_10t` | behavioural, phase-level model of the 10-transistor cell |
| `fast_carry_latch` | behavioural, phase-level model of the full adder and its dynamic carry latch |

## The row loop and its bit order

In a row, cell 0 is the leftmost cell and holds the most significant bit; cell
15 holds the least significant bit. As a data word, cell `i` is bit `15-i`, so
`rd_data` and `instr_data` read naturally as numbers. A shift step moves every
bit one cell to the right at once. The bit leaving the LSB cell goes through
the ALU and enters the MSB cell.

Worked example, one 8-bit word holding 5 with the operand 1, both fed LSB
first (this is the walkthrough the design's authors give for the adder):

| step | word before | LSB in | operand bit | carry in | sum to MSB | carry out |
|---|---|---|---|---|---|---|
| 0 | 0000_0101 | 1 | 1 | 0 | 0 | 1 |
| 1 | 0000_0010 (MSB now 0) | 0 | 0 | 1 | 1 | 0 |
| 2 | 1000_0001 | 1 | 0 | 0 | 1 | 0 |
| ... | | | | | | |
| 8 | 0000_0110 | | | | | |

After exactly 8 steps the word is 6 and back in place. The sum is taken
modulo 2^q: a carry out of the MSB is dropped.

## Word configuration

The 16 cells of a row are cut into two segments of 8 (`SEG_W`). Each segment
has its own ALU at its LSB end, and a routing unit sits between the segments.
Along the row runs a return line from right to left, carrying the output of
the ALU that closes a word back to that word's MSB cell.

| `join_seg` | words per row | loop of the left word | loop of the right word |
|---|---|---|---|
| 0 | 2 x 8 bit | cells 0-7 -> ALU0 -> cell 0 | cells 8-15 -> ALU1 -> cell 8 |
| 1 | 1 x 16 bit | cells 0-15 -> ALU1 -> cell 0 (ALU0 idle) | (same word) |

In 2 x 8 mode an 8-step ADD updates both bytes at once, and a carry never
crosses from the right byte into the left byte. In 1 x 16 mode a 16-step ADD
is an ordinary 16-bit addition. The RTL generalises this to `COLS/SEG_W`
segments, with one join bit per segment boundary; the segment ALUs of joined
segments pass their bit unchanged.

The original description says that when two words are joined "two ALUs are
cascaded", without saying how. Here the joined word goes through the row-end
ALU only. This gives a correct 16-bit sum in 16 steps, but it is a reading,
not a copy, of that sentence.

## The shift step and its three control signals

In silicon a shift cannot be a clocked flip-flop per cell; it is done with
three switch phases per step, on latches that hold their value on a floating
node while the loop is open:

| sub-cycle | phi1 | phi2 | phi2d | what happens |
|---|---|---|---|---|
| hold (idle) | 0 | 1 | 1 | every cell is a closed inverter loop |
| DEAD0 | 0 | 0 | 1 | loops start to open |
| P1 (phase 1) | 1 | 0 | 0 | each cell's input takes its left neighbour's output; the carry-out is parked on node T1 |
| DEAD1 | 0 | 0 | 0 | gap between phi1 and phi2 |
| P2 (phase 2) | 0 | 1 | 0 | the new bit reaches the cell output |
| P3 (phase 3) | 0 | 1 | 1 | the loop closes and restores the bit; the parked carry becomes the carry-in |

phi1 and phi2 never overlap. If they did, a bit would run through several cells
in one step. phi2d is phi2 delayed by one sub-cycle. `phase_gen` produces this sequence
from the system clock, five clock cycles per step, and pulses `shift_en` in
P1. The register-level cells and carry registers update on the clock edge that
ends P1, which is where the circuit commits the new bit. The published chip
makes the same phases from a two-phase non-overlapping clock and an
inverter-pair delay, one step per clock period. The five-cycle division is
this design's choice, so cycle counts here are five times the step count.

`fast_cell_10t` and `fast_carry_latch` model the phases themselves. Their
storage nodes are level-sensitive latches. The cell model runs on a four-cell
ring with the sequence above. It reproduces the published shift transient: 0,0,0,1
becomes 1,0,0,0, then 0,1,0,0, and so on. The adder model reproduces the published
4-bit example 0011 + 0001 = 0100 bit by bit, including when T1 and the
carry-in change. They do not model analog levels, leakage or noise margin.
Both trip a lint warning about a circular path: it is the cell's inverter
loop and the carry feedback, and it is intended.

## Host interface (`fast_top`)

Instructions are taken on `instr_valid & instr_ready`. `instr_ready` is low
while an ADD or ROTATE runs. An instruction held while `instr_ready` is low
must stay unchanged; an assertion checks this.

| `instr_cmd` | fields used | effect | cycles |
|---|---|---|---|
| `CMD_WRITE` | `instr_addr`, `instr_data` | write one row | 1 |
| `CMD_READ` | `instr_addr` | read one row; `rd_data` valid with `rd_valid` the next cycle | 1 |
| `CMD_CONFIG` | `instr_data[0]` | `join_seg`: 0 = 2 x 8, 1 = 1 x 16 | 1 |
| `CMD_ADD` | `instr_steps`, `instr_data`, `instr_ext` | every row adds an operand over `instr_steps` steps | 1 + 5 x steps |
| `CMD_ROTATE` | `instr_steps` | every row rotates right by `instr_steps` cells | 1 + 5 x steps |

`done` is high in the last cycle of an ADD or ROTATE, 5 x steps cycles after
the cycle that accepted it. For an addition, `instr_steps` must equal the word
width (8 in 2 x 8 mode, 16 in 1 x 16 mode), or the words end up rotated.

Operands come in two ways:

* `instr_ext = 0`: `instr_data` is added to every row, laid out like a row. In
  2 x 8 mode `instr_data[15:8]` goes to the left word and `[7:0]` to the right
  word.
* `instr_ext = 1`: each row gets its own operand, one bit per step. The
  macro shows the step in `step_idx` (0 = LSB). The host presents
  `ext_operand[row][seg]` for that step: bit `step_idx` of the word closed by
  segment ALU `seg`. `shift_step` pulses when the bits are taken.

`phases` brings the three control signals out. They are the signals a
circuit-level array would receive.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `ROWS` | 128 | rows (all updated in parallel) |
| `COLS` | 16 | cells per row |
| `SEG_W` | 8 | cells per word segment; `COLS` must be a multiple |

The defaults are the test chip's. The batch-update time does not depend on
`ROWS`; it depends only on the word width: 5q clock cycles for q-bit words,
checked from 32 to 2048 rows. Other sizes work by changing the parameters,
for example `COLS = 128, SEG_W = 32` for four 32-bit words per row.

## Simulating

Every testbench is self-checking. Each prints one line
`TB_RESULT checks=N failures=M` and stops. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl --top-module tb_fast_top \
    rtl/fast_pkg.sv tb/tb_fast_top.sv
./obj_dir/Vtb_fast_top
```

| testbench | what it checks |
|---|---|
| `tb_fast_top` | the macro at its default size: fills all 128 rows, 2 x 8 and 1 x 16 additions with broadcast and per-row operands, rotations, reads every row after every operation against a model; checks that a q-step operation takes exactly 5q cycles and q shift steps; counts that each mechanism (both configurations, carry across the byte boundary, carry stopped at the word boundary, wrap-around, per-row operands, rotation) occurred |
| `tb_fast_array` | 128 x 16 array with per-row operands driven directly |
| `tb_fast_row` | one row: rotations and additions in both configurations |
| `tb_fast_alu`, `tb_fast_cell`, `tb_fast_route_unit`, `tb_row_decoder` | the leaf blocks |
| `tb_phase_gen` | exact phi1/phi2/phi2d pattern, non-overlap, delay of phi2d, 5n-cycle runs |
| `tb_ctrl_decoder` | instruction decoding and operand bit selection, with the phase generator played by the testbench |
| `tb_fast_cell_10t`, `tb_fast_carry_latch` | the phase-level models against the published waveform values |
| `tb_fast_sweep` (with `fast_sweep_case`) | batch additions on other sizes: 4-, 8-, 16- and 32-bit words, four 32-bit words in a 128-column row, 32 to 2048 rows; checks every row and that a q-bit update takes 5q cycles at every row count. Its build takes a few minutes (the 2048-row array) |
| `tb_phase_vs_rtl` | a 16-cell ring of phase-level models and the register-level row, driven by the same `phase_gen`, must agree after every addition and rotation |

Simulation is two-state: SRAM cells have no reset and start at random
values, as on silicon, so a testbench must write a row before it reads it.

## What follows the original design and what does not

Taken from the published description: the shift-right row loop with a 1-bit
full adder between LSB and MSB, and bit-serial addition in q steps. Also the
carry held for one step on a dynamic node, loaded in phase 1 and returned in
phase 3. The three-phase shift with non-overlapping phi1/phi2 and a delayed
phi2d, and idling with phi2 = phi2d = 1. The 128 x 16 array, the 2 x 8 / 1 x 16
word configuration with a routing unit between cells 7 and 8, and the
conventional row decoder and row port.

This design's own choices, where the description is silent:

* The instruction set, its encoding and the valid/ready handshake. Only the
  role of the control decoder is described.
* How operands reach the rows: a broadcast operand, or per-row bits from the
  host. The per-row control lines are drawn but not specified.
* The ALU supports only ADD and pass-through. Other 1-bit operations are
  mentioned as possible but not defined.
* The carry is cleared before each ADD.
* There are five system-clock sub-cycles per shift step.
* In 1 x 16 mode the joined word uses the row-end ALU alone.
* Read and write take one cycle each, with the read data registered.
* Bitline precharge, sense amplifiers and wordline drivers are analog and not
  built. Their logical effect (the selected row's bits on the data port) is
  written as AND-OR logic in `fast_array`.

All rows always shift together; there is no per-row shift enable.

Not reproduced: energy, timing in nanoseconds, noise margin, and the physical
folding of each row into a loop to shorten wires (it changes wire length, not
function).
