# TIMELY in SystemVerilog: a time-domain ReRAM processing-in-memory accelerator

ReRAM crossbars compute dot products where the weights are stored: put an
input on every row, and each column's current is the sum of input times cell
conductance. In such accelerators most of the energy goes into moving inputs
and partial sums between buffers and into the converters at the array edges,
not into the arithmetic. TIMELY cuts both costs with three ideas:

* **Time-domain interfaces.** An 8-bit input becomes a pulse width, not a
  voltage. A digital-to-time converter (DTC) does this, and a time-to-digital
  converter (TDC) turns a pulse back into a number. Both are small and cheap,
  so one of each can be shared by GAMMA = 8 rows or columns.
* **Analog local buffers.** Time-domain latches (X-subBufs) sit between
  horizontally neighbouring crossbars and pass one input on to every crossbar
  of a row. Current copies (P-subBufs) and current adders (I-adders) sum the
  columns of all vertically stacked crossbars. A dot product over
  16 × 256 = 4096 rows is therefore converted back to digital only once.
* **Only-once input read (O2IR).** In a convolution, many inputs of one output
  position are needed again at the next position. These inputs move between
  rows of the first X-subBuf column instead of being read and converted again.

This RTL builds the chip from these parts. It is cycle-accurate at the
resolution of one DTC unit delay. The digital parts are synthesizable, and
the analog parts are behavioural models.

## Time signals and the tick clock

Everything runs on one clock whose period stands for the DTC unit delay
T_del (50 ps in the paper's technology).

* **Conversion window.** CONV_TICKS = 500 ticks, which is 25 ns.
* **Time value.** A value D is carried by a 1-bit line that is high for the
  last D ticks of a window. Two time values of the same window therefore end
  together and differ only in when they rise.
* **Pipeline cycle.** GAMMA = 8 windows.
* **Converter sharing.** Converter k of a bank serves lines k·GAMMA+s, one
  per window s. In the first window it serves lines 0, 8, 16, …, in the
  second window lines 1, 9, 17, …, and so on. This is how one DTC serves
  8 rows and one TDC serves 8 columns.

The DTC (`dtc.sv`) latches its code at the window start and raises its output
when the remaining ticks drop below the code. The TDC (`tdc.sv`) counts high
ticks, saturates at 255, and presents the result with `valid` one tick after
the window ends.

## Inside a sub-chip

```
 input buffer ─ input_loader ─ dtc_bank (x16, 32 DTCs each)
                                  │
      ┌───────────────────────────┘  time lines, 256 per crossbar row
      ▼
  X-subBuf(col 0, with transfer) ─ crossbar(v,0) ─ X-subBuf ─ crossbar(v,1) ─ … ─ crossbar(v,11)
      ⋮ 16 crossbar rows                 │ column charge     (all 12 crossbars see the same inputs)
                                         ▼
               i_adder per crossbar column (sums 16 crossbars)
                                         ▼
           charge_comp (2nd capacitor, constant-current charge, comparator)
                                         ▼
                 tdc_bank (x12, 32 TDCs each) ─ post_unit ─ output buffer
                                                 shift&add → ReLU → max-pool → requantise
```

The default sizes are the paper's: 256 × 256 cells per crossbar, 4 bits per
cell, 16 × 12 crossbars, 16 × 32 DTCs, 12 × 32 TDCs, 2 KB input and output
buffers, and 106 sub-chips per chip.

### Dot product in two charging phases

* **Phase I.** During the eight windows of a conversion cycle, the rows pulse
  one window group after another. Each crossbar column integrates
  Q_j = Σ_i T_i · G_ij. Conductance is proportional to the stored 4-bit
  level. `reram_crossbar.sv` counts, per row, the ticks the row was high, and
  forms Q at the cycle's last tick. `i_adder.sv` adds the Q of the
  16 crossbars in one column.
* **Phase II** (next cycle). The charge sits on a capacitor that is charged
  further by a constant current I_c = NROWS · 15 per tick, which is the
  current of all 4096 rows at minimum resistance. The comparator fires when
  the threshold, I_c · CONV_TICKS, is passed, and stays high to the window's
  end.
* **Result.** The pulse is floor(Q / I_c) ticks wide. This is the dot product
  scaled into 0…255, and the column's TDC reads it.
* **Column order.** Column c runs phase II in window c mod 8, which is exactly
  when its shared TDC looks at it.
* **Ping-pong capacitor.** The charge is moved to a second capacitor at the
  cycle start, so phase I of the next cycle can overlap phase II. This is a
  choice of this design, which the pipeline needs.

### 8-bit weights from 4-bit cells

An 8-bit weight occupies two neighbouring columns: column 2j holds the upper
nibble and column 2j+1 the lower. `shift_add.sv` forms
`msb·16 + lsb + bias` as a 16-bit saturating value. `relu.sv` clamps negative
values when enabled. `maxpool.sv` keeps the maximum of POOL consecutive
results. The result is shifted right by SHIFT and clamped to 0…255, which
gives the 8-bit input of the next layer. A sub-chip therefore produces up to
1536 results per cycle, and NOUT sets how many of them are used.

### The X-subBuf and input transfer (O2IR)

An X-subBuf is a set-latch per row: `out = in | (held & ~phi)`. The latch is
cleared by `phi` on the first tick of each window. A pulse that ends with the
window passes through unchanged. A pulse that rises and then drops is held to
the window's end, which is how a time value is stored.

The X-subBuf column next to the DTCs can also transfer inputs between rows:

* **Recording.** Each latch records the width of the pulse it held.
* **Shifting.** Each `xfer` pulse shifts all records one row up, so row r
  takes the record of row r+1. The controller issues `stride` such pulses at
  the start of every conversion cycle after the first.
* **Replaying.** A row marked in the replay mask skips its DTC and buffer
  read, and re-emits its record in its own window. So a replayed row
  receives the input that row r+stride had in the previous cycle.
* **Layout.** When the weights of a convolution are laid out so that the
  input window slides by `stride` rows per output position, only the rows
  that enter the window need a new read. Laying the weights out this way is
  the compiler's job.
* **Block boundary.** Transfer stays within one crossbar's 256 rows. A row
  whose source would lie past the end gets 0.

### Pipeline, stalls and the cycle budget

The controller (`controller.sv`) runs a layer of N cycles as a four-stage
pipeline. It takes N+3 cycles, and in steady state four cycles' data are in
flight:

| stage | cycles | work |
|---|---|---|
| A | 0 … N−1 | read the next cycle's fresh inputs (two bytes per tick) |
| B | 1 … N | DTC conversion, X-subBuf transfer, phase I |
| C | 2 … N+1 | phase II, comparator, TDC |
| D | 3 … N+2 | shift-and-add, ReLU, pooling, output write |

The tick counter waits at the start of a cycle while the loader has not
finished, or while the previous output stream is still being written. This
is a stall, and it is counted. The loader also waits for input bytes that
have not arrived yet. So a layer may be started before its inputs are
written, and it then stalls until they come. The first cycle of a layer
reads and converts every row. The replay mask applies from the second cycle
on.

### Configuration and commands

Commands are `timely_pkg::bus_req_t` = {valid, sub[6:0], cmd, addr[31:0],
data[15:0]}:

* `CMD_WEIGHT`: addr = {crossbar v·12+h [31:16], row [15:8], column [7:0]},
  data = 4-bit level.
* `CMD_INPUT`: one input byte at a buffer address. A layer's fresh bytes are
  stored in the order they are used: all rows of cycle 0, then the
  non-replayed rows of each later cycle.
* `CMD_CFG`: registers 0–8 are NCYC, STRIDE, NOUT, POOL, SHIFT, BIAS (signed),
  RELU, DEST and FWD. Registers 0x1000+r are the replay bit of row r.
* `CMD_START`: run the configured layer. `done` pulses at the end.

## The chip and its bus

`timely_chip.sv` places NSUB = 106 sub-chips on one bus (`subchip_bus.sv`).
While the bus is idle, host commands pass straight to the addressed
sub-chip. A sub-chip configured to forward raises a request when its layer
is done. The bus serves the requests round-robin:

1. It copies the output buffer of the requesting sub-chip, `out_count` bytes
   at one byte per clock, into the input buffer of sub-chip DEST.
2. It sends CMD_START to DEST.
3. It acknowledges the source.

Layers thus flow from sub-chip to sub-chip (the inter-sub-chip pipeline).
The host reads any output buffer through `rd_*`. `stat_*` sums the activity
counters of all sub-chips.

## Where this RTL departs from the paper

* **LSB capacitor.** The paper charges the lower-nibble column on a capacitor
  half the size of the upper-nibble one. That doubles the LSB pulse range to
  0…510, which an 8-bit TDC cannot hold. Both columns use the same
  capacitor, and the shifter weighs the upper nibble by 16.
* **Four pipeline stages instead of five.** The DTC and phase I share a
  stage, because a time signal exists only while the DTC produces it.
* **Latch reset.** The latches are reset by a one-tick phi at the start of
  every window. The paper resets them once per pipeline cycle, with a 25 ns
  reset phase. With shared DTCs, each window carries different rows, so a
  per-window reset keeps them apart.
* **Clock.** The paper's system clock is 40 MHz, one period per 25 ns
  conversion window. Here the clock is the 50 ps tick, and the window is a
  count of ticks.
* **Bias.** The bias is one signed constant per layer, added after the
  shifter. The paper does not say where the bias is added.
* **ReLU count.** One ReLU unit per sub-chip, not two, since results stream
  at one per tick.
* **Not modelled.** P-subBufs are unity current copies, so the crossbar
  outputs feed the I-adders directly. Analog non-idealities (noise, mirror
  error, ReRAM variation) are not modelled, and charge arithmetic is exact.
* **Large layers.** Partial sums are not merged across sub-chips. A layer
  must fit in 4096 input rows per sub-chip. Output channels may be split
  over several sub-chips.
* **Input buffer.** It is not refilled during a layer, so a layer's fresh
  inputs per sub-chip must fit in 2 KB. Of the paper's benchmarks, the
  MNIST-sized networks (PRIME's CNN-1 and MLP-L) fit. VGG, MSRA, ResNet and
  SqueezeNet need 3×3×512 = 4608-row layers or larger feature maps.
* **Not built.** The inter-chip link and the software compiler that produces
  the mapping and command stream.

The behavioural models (`reram_crossbar`, `i_adder`, `charge_comp`) use
`real` arithmetic and are not synthesizable. Everything else is.

## Verification and how far to trust it

Every block has a self-checking testbench in `tb/tb_<block>.sv`. Each one
compares the block against a reference computed in the testbench and prints
`TB_RESULT checks=N failures=M`:

* **Converters and latches.** The DTC, TDC and their shared banks, and the
  X-subBuf, are checked tick by tick. The X-subBuf check covers the latch,
  recording with saturation, multi-row shifts and replay.
* **Analog models.** The crossbar, I-adder and charge comparator are checked
  against integer sums.
* **Digital units.** Shift-add, ReLU, pooling and the buffers are checked
  against models.
* **Controller.** It is checked against a cycle model: stage flags, stalls,
  transfer pulses, cycle count N+3 and the done pulse.
* **Sub-chip** (`tb_subchip`). The test runs 2 × 2 crossbars of 8 × 8
  cells, GAMMA = 2 and 300-tick windows through six random layers. Its
  reference model covers O2IR replay, the shift-and-add arithmetic, ReLU,
  pooling and requantisation. It also checks every event counter, and it
  makes some layers stall on late inputs.
* **Chip** (`tb_timely_chip`). The test runs 3 sub-chips of that size as a
  two-layer network: layer 1 is forwarded over the bus into layer 2. It
  counts, and requires, at least one of each mechanism: O2IR transfer,
  DTC sharing, pipeline overlap, forwarding, ReLU, pooling and stall.
* **Convolution workload** (`tb_conv_o2ir`). A 5×5 convolution with five
  filters slides along a 14-pixel-wide image band on a 32-row sub-chip.
  Each output position after the first reads only the 5 pixels of the new
  image column; the other 20 move up by transfer. The outputs are checked
  against a direct convolution, and the buffer reads against the 25 per
  position that a design without reuse would make.
* **Size.** This chip test is the largest configuration simulated. The
  106-sub-chip default is only compiled. At tick resolution, one full-size
  cycle is 4000 clocks over 20 352 crossbars of 65 536 cells.

The window length in all tests is 300 ticks, the smallest that still covers
8-bit codes plus transfer ticks. The controller asserts
`CONV_TICKS > 272`.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_subchip \
          rtl/timely_pkg.sv tb/tb_subchip.sv
./obj_dir/Vtb_subchip +verilator+rand+reset+2
```

Verilator finds the other modules by file name in `rtl/`.

## Files

| file | role |
|---|---|
| `timely_pkg.sv` | sizes, command encoding, bus request struct, configuration register map |
| `dtc.sv`, `dtc_bank.sv` | 8-bit DTC; bank of B/GAMMA shared DTCs |
| `x_subbuf.sv` | time latch column with optional transfer/replay |
| `reram_crossbar.sv` | crossbar array model |
| `i_adder.sv`, `charge_comp.sv` | current adder; two-phase charging and comparator models |
| `tdc.sv`, `tdc_bank.sv` | 8-bit TDC; bank of shared TDCs |
| `shift_add.sv`, `relu.sv`, `maxpool.sv` | post-processing units |
| `input_buffer.sv`, `output_buffer.sv` | 2 KB buffers |
| `input_loader.sv`, `post_unit.sv` | stage A and stage D logic |
| `controller.sv` | configuration and pipeline sequencing |
| `subchip.sv`, `subchip_bus.sv`, `timely_chip.sv` | sub-chip, chip bus, top |
