# ATRIA: stochastic multiply-accumulate inside DRAM subarrays

ATRIA runs CNN inference inside ordinary DRAM. It uses stochastic arithmetic. An 8-bit value is
stored as a 512-bit vector whose share of ones encodes the value. With this encoding:

- multiplying two values is a bitwise AND of their vectors;
- a scaled sum of sixteen products is one 16:1 selection per bit position.

A DRAM subarray can compute an AND across a whole 8 Kb row with triple row activation (TRA).
This is the Ambit majority of three rows, with the third row held at zero. A row holds sixteen
512-bit operands. So one row-wide AND gives sixteen products at once. A bank of 512 16:1
multiplexers behind the sense amplifiers then builds

    F_MAC = (N1·M1 + N2·M2 + … + N16·M16) / 16

as a new 512-bit vector. The select inputs come from 4-bit random registers (RND), one per
multiplexer. A pop counter turns a result back into binary (S-to-B). A lookup table turns binary
activations into vectors (B-to-S). A ReLU table and a max-pooling tree finish each layer.

This RTL models that datapath cycle by cycle, at the module organisation of the original design.
The defaults are:

- 8 chips × 8 banks × 64 subarrays = 4096 processing elements;
- 256 rows of 8192 bits per subarray;
- one memory operation cycle (MOC) = 17 ns = 34 cycles of a 2 GHz clock.

## The stochastic MAC step by step

Each F_MAC is a fixed sequence of MOCs, issued by the subarray controller
(`rtl/subarray_ctrl.sv`) to the subarray model (`rtl/dram_subarray.sv`):

| MOC | operation | effect |
|---|---|---|
| 1 | RowClone copy | operand row A → compute row 1 |
| 2 | RowClone copy | operand row B → compute row 2 |
| 3 | TRA of rows 1, 2, 3 | majority(A, B, 0) = A AND B, in all three rows and the sense amplifiers |
| 4 | read | sense amplifiers → FPU; the 512 MUXes form the F_MAC vector |
| 5 | write | F_MAC vector written back into one 512-bit segment of the destination row |

TRA overwrites all three rows with the majority, so compute row 3 holds A AND B afterwards. The
next F_MAC needs a zero there again. This design adds one more MOC, a write of zeros to row 3,
before every F_MAC except the first after reset. A steady-state F_MAC therefore takes **6 MOCs**,
not 5. The testbenches check 5 MOCs for the first F_MAC and 6 for later ones. A single F_MAC
command returns after 6·T_MOC + 2 cycles.

### MUX wiring

MUX j, input k, sees sense-amplifier bit `512·k + j`. That is bit j of operand k, as drawn in the
multiplexer figure of the original design. One sentence of the original text speaks of "16
adjacent S/As" per MUX, which conflicts with that drawing. The drawing was followed, because only
it makes each output bit a selection among the sixteen products at the same bit position.

The select of MUX j is `rnd[j]`. The RND registers load from one DRAM row, **plane-wise**: bit b
of register j comes from row bit `512·b + j`. So four segments of one row hold all 512 selects.

## Processing element

`atria_pe` combines three blocks:

- the subarray model;
- the subarray controller;
- the function processing unit (`fpu`), which contains:
  - `rnd_regs` and `sc_mux_array`: the 512 × 16:1 selection;
  - `pop_counter`: S-to-B, one bit per cycle, 512 cycles plus one;
  - `relu_lut`: 256-entry ReLU table, applied to the pop count;
  - `bts_lut`: 256 × 512-bit B-to-S table;
  - `maxpool`: comparator tree over up to 64 bytes of a segment, 6 cycles.

### Commands (µ-operations)

A PE accepts these commands:

| command | what it does |
|---|---|
| WRITE_SEG | write one 512-bit segment of a row |
| READ_SEG | read one segment and return it |
| FMAC | run `len` F_MACs over consecutive rows, writing consecutive segments |
| LOAD_RND | load the RND registers from a row |
| STOB | start a pop count of one segment in the background |
| STORE_ACT | write the ReLU'd count as one byte of a row |
| BTOS | convert one byte of a row through the B-to-S table into a segment |
| MAXPOOL | max of the first `len` bytes of a segment, stored as one byte |
| WR_BTS_LUT | write one entry of the B-to-S table |
| WR_RELU_LUT | write one entry of the ReLU table |
| MOVE | chip level only: copy a segment from one PE to others |

### Overlap and stalls

The pop counter runs in the background, so STOB returns at once and F_MACs go on during the 512
counting cycles (counted as overlapped MOCs). STORE_ACT waits until the count is ready; that
wait is counted as a stall.

## Controllers

Control is hierarchical:

- **Subarray controller.** Turns each command into MOCs and FPU steps (above).
- **Bank controller** (`bank_ctrl`). Latches one command with a 64-bit subarray mask. It waits
  until every selected PE is ready, then issues the command to all of them in the same cycle
  (multicast). Read data returns one cycle later.
- **Chip controller** (`chip_ctrl`). Does the same across banks with an 8-bit bank mask. It also
  runs MOVE: a READ_SEG on the source PE, with the answer kept in a buffer, then a WRITE_SEG of
  that data to the destination PEs. MOVE stands in for the inter-subarray links of the original
  design.
- **Top** (`atria_top`). Gives every chip its own command port; chips do not talk to each other.

## Number formats chosen here

The original design leaves these encodings open. The testbenches load the tables with:

- **B-to-S:** a thermometer code. Value v sets the low 2v bits of the 512-bit vector.
- **S-to-B:** the pop count divided by two and saturated at 255, so a B-to-S vector reads back
  as the same value.
- **ReLU:** offset binary, with code 128 meaning zero; the output is max(c, 128).

Both tables are written by commands, so any other encoding can be loaded without changing RTL.

## Departures from the original design

- Row 3 is re-zeroed before each F_MAC, giving 6 MOCs per F_MAC instead of 5 (see above).
- The MUX wiring follows the drawing, not the "adjacent S/As" sentence (see above).
- The pop counter takes 513 cycles (256.5 ns) from start to done. The original gives 256 ns.
- Max pooling takes 6 cycles (3 ns). The original gives 5 ns.
- The PE count is 4096 (8 × 8 × 64). One table of the original prints 4098.
- The inter-subarray links, the host controller, the PCIe/DMA path and the DRAM peripherals are
  not modelled. Data between PEs moves through the chip controller buffer.
- The subarray is a behavioural model: an array of rows with MOC timing. It has no analog charge
  sharing, refresh, or row-buffer policy.
- The tables are loaded by the host; their contents are not fixed in RTL.
- Workload capacity: a whole network's weights are held as 512-bit vectors, 64 times their 8-bit
  size. The 8 Gib module holds GoogleNet (about 3.2 Gib), but not AlexNet, ResNet-50 or VGG16.
  Weight counts are standard figures, not taken from the original. Reloading weights layer by
  layer is left to the host and is not modelled.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=… failures=…` and has a watchdog.

`tb_atria_top` runs one CNN layer end to end on 2 chips × 2 banks × 2 PEs, with 32 rows and
T_MOC = 4. That is the largest size simulated. The full default size (4096 PEs with 2 Mb of
cells each) is too large for a cycle-based simulation here: Verilator needs about 16 GB just to
elaborate it. The end-to-end test goes through these steps:

1. Multicast table, RND and weight loads.
2. B-to-S of 16 activations.
3. An F_MAC.
4. A pop count overlapped with a second F_MAC.
5. A ReLU store, then a stalled store.
6. An inter-bank MOVE.
7. Max pooling.

Results are compared with a reference model in the testbench. The test counts each mechanism
(multicast, B-to-S, F_MAC, Row 3 re-zero, overlap, stall, move, max pooling) and fails if any
never happened.

To simulate with Verilator (5.x):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
      rtl/atria_pkg.sv tb/tb_util_pkg.sv tb/tb_atria_top.sv --top-module tb_atria_top
    ./obj_dir/Vtb_atria_top

Replace `tb_atria_top` with any other `tb_*` name to run that block's test. Sizes are parameters:

- `N_CHIPS`, `N_BANKS`, `N_SUB` and `ROWS` on the top, bank and chip;
- `T_MOC` for the MOC length in cycles (at least 3).
