# FlexSpIM: a bit-flexible digital compute-in-memory core for spiking CNNs

A spiking convolutional network spends most of its time on one operation:
when an input spike arrives, a kernel of weights is added to the membrane
potentials of the neurons it reaches. Later, each potential is compared with
a threshold. A neuron that crosses its threshold emits a spike and is reset.
FlexSpIM does these additions inside an SRAM array. It raises two wordlines at
once, and the bitlines then give the AND and the NOR of the two stored rows.
A small peripheral circuit (PC) under each column turns those two bits into a
one-bit full adder. Its carry can come from either neighbouring column or
from its own register.

Three properties set the design apart:

* **Operands of any width and any shape.** A weight or potential of
  `N_R x N_C` bits occupies `N_C` neighbouring columns and `N_R` rows. The
  widths of weights and potentials are chosen per layer and need not be
  related. The shapes run from fully bit-parallel (one row) to fully
  bit-serial (one column).
* **One memory for weights and potentials.** The same 512 x 256 array holds
  both. Each layer can keep whichever operand is larger, or more
  expensive to move, resident in the array:
  * weight-stationary (WS): weights stay in the array;
  * output-stationary (OS): potentials stay in the array.

  The other operand is streamed through an on-chip buffer.
* **Standby columns.** Columns that hold no operand are put in standby.
  Their PCs then neither latch nor write.

This repository holds synthesizable SystemVerilog for the digital part of
the chip and self-checking testbenches for every block. The pad ring, the
internal clock oscillator and the sense-amplifier references are analog and
are not modelled.

## 1. Adding in the bitlines

Take one column and raise the wordlines of rows A and B:

| signal | value           |
|--------|-----------------|
| BL     | `A & B`         |
| BLB    | `~(A \| B)`     |
| XOR    | `~(BL \| BLB)`  |
| sum    | `XOR ^ Cin`     |
| carry  | `BL \| (Cin & XOR)` |

The PC stores the sum back into row A, the potential row, in the same CIM
operation. A multi-bit addition therefore needs no read-out to the
periphery: one CIM operation per operand row.

`cim_sram_array` models the array:
* The read is a combinational wired AND over the selected rows.
* The emulation-bit row (below) can join the read in place of a stored row.
* A write is a column-masked write of one row.

`pc` holds the dual sense-amplifier latch, the adder, the carry register,
the flag logic and the write drivers.

## 2. Operand shapes and the ping-pong carry

An operand of `N_R x N_C` bits is laid out in a zig-zag:
* bits 0 to `N_C-1` fill row 0 from left to right;
* the next `N_C` bits fill row 1 from right to left;
* and so on, alternating direction.

Weights and potentials use the same `N_C`, so a potential with more bits
simply has more rows.

The carry inside a row therefore runs left to right on even rows and right
to left on odd rows. The last carry of one row ends in the column where the
next row's first bit sits. Its own carry register can then feed it. No carry
ever travels further than to a direct neighbour, whatever the macro width.

Two control bitcells per column (`ctrl_bitcells`) give each column's role,
written as `{ctrl#1, ctrl#2}`:

| code | state    | meaning                     |
|------|----------|-----------------------------|
| 00   | MIDDLE   | inside an operand           |
| 10   | LEFT     | left edge of an operand     |
| 01   | RIGHT    | right edge of an operand    |
| 11   | INACTIVE | standby                     |

A one-column (bit-serial) operand marks every column LEFT.

The 2-bit carry-select code SEL is the same for all columns in a CIM
operation. It picks each column's carry-in (`carry_select`):

| SEL | row                                | LEFT column    | RIGHT column   | others              |
|-----|------------------------------------|----------------|----------------|---------------------|
| 11  | first row (left to right)          | 0              | from left      | from left           |
| 01  | right-to-left rows                 | from right     | carry register | from right          |
| 00  | later left-to-right rows           | carry register | from left      | from left           |
| 10  | bit-serial, SEQ=0 (first) / SEQ=1  | 0 / register   | 0 / register   | 0 / register        |

Inactive columns get 0. The controller issues 11, 01, 00, 01, 00, and so on,
for a multi-row operand, and 10 with SEQ set after the first row for a
bit-serial one.

## 3. Flags: overflow, spikes and sign extension

The END column of an operand is the one that computes its most significant
bit:
* the RIGHT column when the operand has an odd number of rows;
* the LEFT column when it has an even number;
* every column in bit-serial mode.

The END column raises a flag, and neighbour links pass the flag across the
operand, the same way the carry travels. Each flag then drives a
multi-column fix-up, a pass of one CIM operation per row (the FIX_SAT or
FIX_CLR macro operations).

* **Overflow and saturation.** In the MSB row the END column computes
  overflow as `(A & B & ~S) | (~A & ~B & S)`, together with the sign of the
  operands. If any operand overflowed, the controller runs one extra pass
  over the potential rows. In that pass, flagged operands are written with
  their saturated value:
  * the sign bit in the END column of the MSB row;
  * the inverted sign everywhere else.

  Saturation therefore replaces wrap-around. Operands without the flag are
  untouched.
* **Threshold comparison and spikes.** Thresholds are stored negated.
  FIRE adds them to the potentials without writing back. The END column
  takes `spike = ~(S ^ overflow)` of that sum, which is the sign of
  `potential - threshold` with overflow taken into account. A spike means
  `potential >= threshold`. The spike vector is one bit per END column. It is
  stored to the buffer, and a FIX_CLR pass then clears the potentials of the
  neurons that spiked.
* **Sign extension through the emulation bits.** When the weight has fewer
  rows than the potential, its missing rows must repeat its sign. Before the
  addition, a sign-capture pass reads the weight's MSB row alone, and the
  END column's sign is written into the emulation-bit row (`eb_row`) across
  the whole operand. For the remaining potential rows, the EB row is read
  instead of a stored weight row.

  The same path gives write-free broadcast. A CFG flag makes every ADD use
  the EB row as its second operand, so one pattern can be added to many
  potential rows without storing it repeatedly.

## 4. Timing of a CIM operation

The chip runs its CIM operations at 157 MHz. A 942 MHz internal clock splits
each operation into six steps. `timing_generator` counts these six clocks,
and the design's `clk` is the fast clock:

| clock | step                                                    |
|-------|---------------------------------------------------------|
| 0     | precharge                                               |
| 1     | dual-wordline read (sense amplifiers latch BL and BLB)  |
| 2     | sum, carry, flags                                       |
| 3     | precharge                                               |
| 4     | write back                                              |
| 5     | done                                                    |

A new operation is accepted in the done clock, so operations run back to
back at one per six clocks. An ADD over `np` potential rows takes:
* `6*np` clocks;
* plus 6 clocks for a sign capture;
* plus `6*np` clocks for a saturation pass.

The macro testbench checks this count.

## 5. The accelerator around the macro

```
 SPI ──► spi_slave ──► instr_mem (11.5 kB) ──► controller_fsm ──► cim_macro (16 kB)
              │       input_mem (4.25 kB) ──►       │                 ▲
              └──────► pw_buffer (16 x 2 kB) ◄──► merge_shift ────────┘
```

* **`cim_macro`.** The 512 x 256 array, the control bitcells, the EB row,
  the two row decoders (`dual_addr_decoder`) and 256 PCs.
  * ADDR#1 (9 bits) selects the potential row that is read and written.
  * ADDR#2 (8 bits) selects the weight or threshold row in rows 0–255.
  * A control word carries the operation, SEL, SEQ and the shape flags.
* **`instr_mem`.** 2944 x 32-bit words of program.
* **`input_mem`.** 1088 x 32-bit words, holding one event per word for one
  timestep. An event is `[8:0]` potential base row and `[16:9]` weight base
  row.
* **`pw_buffer`.** Sixteen 512 x 32-bit banks, interleaved by address modulo
  16. One access moves 1 to 8 consecutive words (up to 256 bits) from any
  start address. In OS layers it holds the weights; in WS layers it holds
  the potentials.
* **`merge_shift`.** Merges 1 to 8 buffer words into a 256-bit row at a
  column offset, with a matching write mask. In the other direction it cuts
  them back out. An operand group can then sit anywhere in the row.
* **`controller_fsm`.** Runs the program. It is described below.
* **`spi_slave`.** The host port.

### Instruction set (opcode in bits 31:28)

| op | name   | fields                                                                 |
|----|--------|------------------------------------------------------------------------|
| 0  | HALT   | stop, raise `ack`                                                      |
| 1  | CFG    | `[8:0]` np rows, `[17:9]` nw rows, `[18]` bit-serial, `[19]` EB operand |
| 2  | CFG2   | `[12:0]` spike buffer address, `[20:13]` column offset, `[24:21]` words |
| 3  | LD     | `[12:0]` buffer address, `[21:13]` row, `[23:22]` target (array / ctrl#1 / ctrl#2 / EB) |
| 4  | ST     | `[12:0]` buffer address, `[21:13]` row                                 |
| 5  | ADD    | `[8:0]` potential base row, `[16:9]` weight base row                   |
| 6  | FIRE   | `[8:0]` potential base row, `[16:9]` negated-threshold base row        |
| 7  | EVLOOP | `[11:0]` first input word, `[23:12]` number of events; one ADD per event |

A timestep of one layer is typically:
1. Configure the shape with LD to the control rows and CFG.
2. Run EVLOOP over the layer's events.
3. FIRE.
4. Move operands with LD/ST:
   * in a WS layer the potentials are swapped in before and out after;
   * in an OS layer the next weights are loaded.

The instruction set, event format and fix-up sequencing are this
implementation's own. The published design describes the flow but not its
encoding.

### Host protocol

SPI mode 0, MSB first, with a chip select. Each frame is 56 bits:
`cmd[7:0] addr[15:0] data[31:0]`. The commands are:

| cmd  | action                                    |
|------|-------------------------------------------|
| 0x01 | write instruction word                    |
| 0x02 | write input-memory word                   |
| 0x03 | write buffer word                         |
| 0x04 | read buffer word (data shifted out on MISO in the same frame) |
| 0x05 | start the program at `addr`               |
| 0x06 | status (bit 0 = done)                     |

SCK must be at most clk/8 because of the two-flop synchroniser. While the
program runs, the controller owns the buffer. `spike_valid`/`spike_vec` show
each FIRE's spike vector, and `sat_event` pulses for each saturation pass.
These are debug outputs.

## 6. Where this RTL departs from the published chip

* **Write-back row.** The result is written into the ADDR#1 row, and
  ADDR#1 holds the potential. The published description does not say
  unambiguously which operand is overwritten. Writing into the potential is
  the only choice that keeps the weights stationary.
* **Fix-up mechanism.** Saturation and spike reset are done by extra
  fix-up passes. The chip's over/under-flow protection and comparison
  circuits are only described by function, so their exact mechanism here is
  this design's.
* **Operand size.** One operand is limited to 511 rows, because the np
  field has 9 bits. Weights and thresholds must sit in rows 0–255 (ADDR#2).
* **Not modelled:**
  * the internal oscillator (the fast clock is an input);
  * the pads and bitline references;
  * the "horizontal interconnect controller" shown in the chip's block
    diagram, whose function is not described.
* **Invented details.** The host protocol, the instruction set and the
  memory word widths (32 bits) are assumptions.

## 7. Verification

Every block has a testbench in `tb/` that checks against an independent model
and prints `TB_RESULT checks=N failures=M`. The unit tests are:

* **`tb_carry_select`.** Exhaustive over the table above.
* **`tb_dual_addr_decoder`**, **`tb_ctrl_bitcells`** and **`tb_eb_row`.**
  Every address; random masked writes.
* **`tb_cim_sram_array`.** AND/NOR dual reads, reads with the EB row, and
  masked writes, on 64 x 32.
* **`tb_timing_generator`.** Exact phase pattern and the 6-clock cadence,
  single and chained.
* **`tb_instr_mem`**, **`tb_input_mem`** and **`tb_pw_buffer`.** Read
  latency 1, and multi-word accesses across bank boundaries.
* **`tb_merge_shift`** and **`tb_spi_slave`.** Random offsets and word
  counts; all command types.

The system-level tests are:

* **`tb_cim_macro`.** 32 columns. Several shapes (4x3 with 2-row weights,
  5x2, 3x3, 2x8, bit-serial 1x6 with 4-bit weights, and EB broadcast). It
  checks the saturating signed additions, spikes, resets, untouched inactive
  columns and the 6-clocks-per-row timing.
* **`tb_flexspim_top`.** The full chip at 32 columns, driven only through
  SPI. Layer 1 is output-stationary: 12-bit potentials, 8-bit weights, five
  events alternating between two kernels, then FIRE and ST. Layer 2 is
  bit-serial and weight-stationary: potentials are loaded from the buffer
  next to stationary weights, then ADD, FIRE and ST. The host reads back the
  spike vectors and potentials and compares them with a saturating model.
  The test counts each mechanism and fails any that never happened: sign
  capture, right-to-left rows, saturation, spikes, resets, bit-serial rows,
  loads and stores.
The largest size simulated is 32 columns, both for the macro and for the
full chip. All sizes are parameters, and the 32-column runs use the full
512-row depth. Building the chip at its full 256 columns with Verilator
takes well over ten minutes of C++ compilation, so no default-size
end-to-end run is included. The 256-column logic is the same PC replicated:
inactive columns only need to stay untouched, and the 32-column tests
already check that.

Simulate with Verilator, for example:

```
verilator --binary --timing -Irtl rtl/flexspim_pkg.sv rtl/*.sv tb/tb_flexspim_top.sv \
          --top-module tb_flexspim_top
./obj_dir/Vtb_flexspim_top
```

The testbenches use `$urandom` only. Every state that is read is reset.
