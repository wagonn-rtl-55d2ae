# WAGONN matrix-vector unit: crossbar rows sorted by weight density, inputs permuted on the fly

In an in-memory-computing crossbar, each column's sense line adds up the currents of all cells in that
column. At very small technology nodes (7 nm in the source study), the wires along a column have high
resistance. A conducting cell far from the column's ADC sees its source voltage pulled up by the IR drop
below it ("source degeneration"), so it delivers less current than it should. The further a cell is from
the ADC, the worse the error.

WAGONN (weight-bit agglomeration) works around this without retraining the network. Each crossbar's
weight rows are reordered so that rows with the most 1s (the most low-resistance cells) sit at the
bottom, next to the ADC. The rows with the most 0s go to the top. Reordering rows changes which input
each row must see. So the input vector has to be permuted the same way, separately for every crossbar,
each time an MVM runs. The hardware cost of WAGONN is that permutation: an **Input Re-mapping Unit
(IRU)** sits between the MVM unit's input register and its crossbars.

This repository has synthesizable SystemVerilog for the digital part of such an MVM unit (MVMU):

- the input register and the IRU (per-crossbar look-up tables and re-mapped registers);
- word-line grouping for all-row activation, partial word-line activation (PWA) and distributed PWA
  (DPWA);
- shift-and-add, the output register and the sequencing controller.

The analog parts are behavioural models: the crossbar, the sample-and-hold and the ADCs.

## 1. The permutation: tracking vectors

The weights are reordered once, offline, when they are deployed. For each crossbar:

1. Compute the row-sum of every weight row, i.e. the number of 1 bits in the row.
2. Sort the rows by row-sum in ascending order. The **tracking vector** `T` records, for every
   original row `i`, its position in that order: `T[i]` is the crossbar row that original row `i` is
   written to. Ties keep their original order in the testbench; any tie rule works.
3. Write weight row `i` into crossbar row `T[i]`. Load `T` into that crossbar's LUT.

Crossbar row 0 is the top row, furthest from the ADC. Row `ROWS-1` is the bottom row, next to the ADC.
The row with the largest row-sum therefore ends up in row `ROWS-1`.

At run time the input for original row `i` must drive crossbar row `T[i]`. The result is then exactly
the MVM of the original, unpermuted layer. The permutation changes only where the 1s physically sit, and
with them the analog error. It does not change the ideal result.

Steps 1 and 2 happen in software. The RTL only stores `T` and applies it.

## 2. The Input Re-mapping Unit

The usual arrangement shares one input register among all crossbars of an MVMU. With WAGONN, every
crossbar needs its own permutation of the inputs. Full crossbar switches would be expensive, so the IRU
gives each crossbar two small memories:

| part | per crossbar | contents |
|---|---|---|
| `remap_lut` | `ROWS` x log2(ROWS) bits | tracking vector: source row to destination row |
| `remapped_register` | `ROWS` x `IN_BITS` 8T-SRAM cells | the inputs, stored in permuted row order |

**Re-mapping** is one pass over the input register. A row counter `i` runs from 0 to `ROWS-1`. In each
cycle it does two things at once:

- it reads input `i` from the input register;
- it reads entry `i` of every LUT.

In the next cycle input `i` is written into every re-mapped register. Each register uses its own LUT's
output as the row address, so one shared data bus fills all the registers. Reads and writes overlap, so
one row is re-mapped per cycle for all crossbars together: 128 write cycles for a 128-row array, plus one
cycle to fill the pipeline.

**Streaming.** A row of a re-mapped register holds one multi-bit input. The crossbar, however, takes one
input bit per word line per cycle. The re-mapped register is therefore read *by column*: reading column
`b` returns bit `b` of all `ROWS` inputs, which is exactly the word-line vector for input bit `b`. An 8T
cell makes this cheap, because its read port (RWL/RBL) is separate from its write port (WWL/WBL). Rows are
written through the write port and columns are read through the read port.

## 3. Word-line activation: all rows, PWA, DPWA

With **partial word-line activation**, only `ROWS/G` rows are driven in one cycle. Each input bit then
takes `G` cycles. This lowers the peak sense-line current, which helps both IR drop and ADC resolution.
`wl_group_mask` produces the row enables:

| mode | rows driven in cycle `g` (g = 0..G-1) |
|---|---|
| `WL_ALL` | all rows, one cycle per input bit |
| `WL_PWA` | consecutive block `g*ROWS/G .. (g+1)*ROWS/G - 1` |
| `WL_DPWA` | interleaved: `g, g+G, g+2G, ...` |

Plain PWA works against WAGONN. After sorting, the dense rows are all in the bottom block, so the last
PWA cycle carries most of the current. DPWA interleaves the groups, so each group gets a share of the
dense rows and the peak per-cycle current falls. The default is `G = 2`, i.e. 64 of 128 rows per cycle,
the configuration the source study favours.

The end-to-end test checks the effect on the model. With random weight rows of varied density, sorted as
above, the largest column count seen in any cycle is typically about 45 with all rows, 33 with PWA and 26
with DPWA. The test requires the DPWA peak to be below the PWA peak.

*Where this differs from the source text:* the text defines DPWA group `i` as rows
`i, i+N/M, i+2N/M, ...` for `M` groups. Taken literally, that gives `M` rows per group. It also
conflicts with the stated 64 active rows per cycle on a 128-row array in two cycles. This RTL uses a
stride of `G` (the number of groups), so each group has `ROWS/G` rows, matching the 64-of-128 figure and
the stated intent of spreading the dense rows.

## 4. From word lines to the output register

For each crossbar `x`, on every activation cycle:

```
plane[x] (bit b of all inputs, permuted) & group mask
      -> crossbar x (sense line c = number of rows with input bit 1 and weight bit 1)
      -> sample_hold (all columns captured at once)
      -> adc (ADCS converters, each owning COLS/ADCS adjacent columns, one column per cycle)
      -> shift_add (code << b, added to the column's running total; cleared on the first cycle)
      -> output_register[x][c]
```

- **Crossbar model** (`crossbar.sv`). One weight bit per cell. A cell conducts when both its weight bit
  and its word-line bit are 1. The model returns the *ideal* sense-line sum in units of one cell current.
  It leaves out the wire, driver and sink resistances, the finite off-state conductance and device
  variation. Those effects are the whole motivation for WAGONN, but they are analog, and this RTL
  reproduces only the architecture that counters them. The accuracy gains reported for WAGONN cannot be
  observed in simulation of this model.
- **ADC sharing.** With one ADC per crossbar (the default), converting 128 columns takes 128 cycles per
  activation cycle. Conversion therefore dominates the MVM time, which is why the IRU's 129 cycles add
  little. With `ADCS = 16`, each converter owns 8 columns.
- **Shift-and-add.** Inputs are unsigned, applied least significant bit first. The PWA/DPWA cycles of the
  same bit are simply added. Result width is `ADC_BITS + IN_BITS` = 16 bits. The largest result,
  128 x 255 = 32640, fits in 15 bits.
- **Weights are single bits.** Multi-bit weights are spread over several columns or crossbars. Combining
  those column results with their place values is left to the vector unit outside the MVMU.

## 5. One MVM, cycle by cycle

`mvmu_controller` runs a fixed sequence after `start`. It samples `mode` in the same cycle as `start`.

1. **REMAP**: the IRU runs, taking `ROWS + 1` cycles.
2. For each input bit `b = 0 .. IN_BITS-1`, and for each group `g = 0 .. n-1` (`n = 1` for `WL_ALL`, `G`
   otherwise), it runs three phases:
   - **PLANE** (1 cycle): read bit plane `b` of every re-mapped register.
   - **EVAL** (1 cycle): masked plane on the word lines; the sample-and-hold captures and the ADCs
     start.
   - **CONV** (`COLS/ADCS` cycles): one column per ADC per cycle through shift-and-add into the output
     register.
3. **DONE**: `done` is high for one cycle.

`done` is high in the cycle that begins `(ROWS+1) + IN_BITS * n * (2 + COLS/ADCS)` clock edges after the
edge that samples `start`. With the defaults that is:

- 1169 cycles for `WL_ALL`;
- 2209 cycles for `WL_PWA` and `WL_DPWA`.

Evaluation of the next cycle does not overlap conversion of the current one. A pipelined controller
could overlap them, because the sample-and-hold frees the crossbar, but this one keeps the sequence
simple.

## 6. Using the top level

`wagonn_mvmu` has plain load ports and a start/done handshake:

1. Weights: for each crossbar `x` and original row `i`, write `w_wr_row = T_x[i]` with the weight bits
   of row `i` (`w_wr_*`). Write `lut_wr_row = i`, `lut_wr_dest = T_x[i]` (`lut_wr_*`).
2. Inputs: write input `i` to `ir_wr_row = i`, in the original order.
3. Pulse `start` with `mode`. Wait for `done`.
4. Read `or_rd_data` one cycle after `or_rd_en`. The value is `sum_i in[i] * W_x[i][c]` for crossbar `x`
   and column `c`.

Nothing may be loaded while `busy` is high. An assertion checks this. The weights and LUTs stay valid
across MVMs, so only the inputs need reloading. Re-mapping runs again on every `start`.

## 7. Parameters

| parameter | default | source |
|---|---|---|
| `ROWS`, `COLS` | 128, 128 | crossbar size of the main configuration |
| `GROUPS` | 2 | 64 of 128 word lines per PWA/DPWA cycle |
| `ADCS` | 1 | one ADC per crossbar (16 is the other evaluated case) |
| `IN_BITS` | 8 | chosen; the input precision is not specified |
| `NUM_XBAR` | 4 | chosen; the number of crossbars per MVMU is not specified |
| `ADC_BITS` | 8 | chosen; enough for any count 0..128 without loss |

All parameters are in `wagonn_pkg` and are passed down from `wagonn_mvmu`. `ROWS` and `COLS` must be
multiples of `GROUPS` and `ADCS` respectively. `IN_BITS` should be a power of two.

## 8. What is built and what is not

Built as synthesizable RTL:

- input register, LUTs, re-mapped registers, the IRU sequencer;
- word-line group mask, shift-and-add, output register, controller, top level.

Behavioural models, each stating this in its header:

- `crossbar`: ideal current sum;
- `sample_hold`;
- `adc`: ideal, clamping, one conversion per clock.

Not built:

- **Word-line DACs.** With one-bit input streams they only drive the word lines, so the crossbar model
  takes the bits directly.
- **Row-sum sort.** This is offline software. The top-level testbench contains a reference version.
- **The surrounding accelerator.** The cores, register file, vector unit, shared memory, tiles and
  on-chip network of the host accelerator (SAMBA) are used in the source study only to estimate
  overheads, and are not specified.
- **Analog non-idealities.** The IR drop, conductance tables and variation that determine the reported
  accuracies are not modelled.

Design choices not taken from the source:

- memory read latencies (one cycle);
- the handshake and load ports;
- LSB-first bit order;
- the block assignment of columns to ADCs;
- unsigned inputs;
- the controller's non-overlapped sequence.

## 9. Files and simulation

`rtl/`:

- `wagonn_pkg.sv`
- `input_register.sv`
- `remap_lut.sv`
- `remapped_register.sv`
- `input_remapping_unit.sv`
- `wl_group_mask.sv`
- `crossbar.sv`
- `sample_hold.sv`
- `adc.sv`
- `shift_add.sv`
- `output_register.sv`
- `mvmu_controller.sv`
- `wagonn_mvmu.sv` (top)

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. `tb_wagonn_mvmu` runs the whole unit at its default size:

- random weight matrices with rows of very different density;
- tracking vectors computed in the testbench;
- every column of every crossbar checked against the unpermuted product, in all three modes;
- the latency formula;
- the peak sense-line count per mode.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/wagonn_pkg.sv tb/tb_wagonn_mvmu.sv \
          --top-module tb_wagonn_mvmu -Mdir obj && ./obj/Vtb_wagonn_mvmu
```

Two more testbenches run the configurations the WAGONN evaluation covers:

- `tb_wagonn_array_sizes` runs the unit with 64x64 arrays, with 256x256 arrays (and a 9-bit ADC), and
  with 128x128 arrays and 16 ADCs per crossbar. It uses the parameterised harness `tb/mvmu_harness.sv`
  and all three word-line modes.
- `tb_wagonn_resnet20_layer` maps two ResNet-20 convolution shapes, 3x3x16->16 and 3x3x64->64, onto
  the default unit. The mapping works as follows:
  - The im2col matrix is cut into 128-row slices.
  - 8-bit two's-complement weights are stored one bit per column. Sixty-four outputs use all 512
    columns of the four crossbars.
  - Every slice is deployed with its own tracking vectors and run in DPWA mode.
  - Outside the unit, the bit columns are recombined with place values (-128 for the sign bit) and the
    slices are summed.
  - The result is compared with the direct integer convolution for one output pixel.

  The weights are random: the point is the mapping and the arithmetic, not accuracy.

Replace `tb_wagonn_mvmu` with any other testbench name. The full-size end-to-end test builds in under a
minute and runs in well under a second.
