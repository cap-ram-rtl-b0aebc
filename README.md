# CAP-RAM in SystemVerilog: a charge-domain in-memory MAC macro

CAP-RAM computes the multiply-and-accumulate (MAC) step of a convolution
where the weights are stored: in a 512 x 128 array of ordinary 6T SRAM cells.
Every column gets a 4-bit input activation through a small DAC, which turns
it into a voltage. Each group of eight cells in a column, called a
*cluster*, shares one switched capacitor. The cell chosen in each cluster
decides whether its column's input voltage stays on that capacitor
(weight bit 1) or is discarded (weight bit 0). All 128 capacitors of a row
of clusters then share their charge on one output line, so the line voltage
is a 128-term dot product of 1-bit weights and 4-bit inputs. A compact SAR
ADC reads that line out directly; it needs no sample-and-hold and no
reference buffer, because it subtracts fixed charge packets from the line.
Digital shift-and-add logic behind the ADCs then builds multi-bit weights
(1 to 8 bits, 2's complement or ternary) and inputs up to 8 bits from the
1-bit x 4-bit partial sums.

This repository holds RTL for the whole macro. The digital parts are written
as synthesizable logic: row drivers, timing control, SAR control, per-ADC
SAR logic and the shift-and-add periphery. The analog parts are behavioural
models that compute with integers: the DACs, the clusters and slices with
their capacitors and output lines, and the ADC comparator with its
charge-injection cells. The weight encodings, the ADC step sequence and the
periphery follow the published design of the CAP-RAM macro (65 nm,
70 MHz). Where that description leaves a detail open, the choice made here is
stated below and in the header comment of each file.

## 1. Organisation of the array

```
          column 0   column 1  ...  column 127        (128 DACs at the bottom)
Slice+ #0  [cluster]  [cluster] ... [cluster]  --- output line+ <0> --\
Slice- #0  [cluster]  [cluster] ... [cluster]  --- output line- <0> ---+-- ADC #0
Slice+ #1  ...                                                          ...
Slice- #31 [cluster]  [cluster] ... [cluster]  --- output line- <31> --+-- ADC #31
```

* 64 slices of 128 clusters, in 32 pairs (a '+' slice and a '-' slice).
  Each pair feeds the two inputs of one ADC.
* A cluster holds 8 cells, so a slice holds 8 rows: 64 x 8 = 512 rows,
  8 KB in all.
* The input bitline of a column runs through all 64 slices. One DAC value
  therefore reaches the same column of every slice.
* One IMC operation uses the same row (word line 0..7) in every active
  slice. Different network layers live in different rows, and switching
  layers costs nothing.

For normal SRAM access the row address is `{pair[4:0], polarity, wl[2:0]}`,
with polarity 0 for '+' and 1 for '-'. Slice index `2*pair + polarity`
follows the physical order +#0, -#0, +#1, and so on. This address layout is
this design's choice.

## 2. One operation: four array phases, then eight SAR steps

`imc_timing` runs every operation as a fixed 12-clock sequence. The clock is
the SAR clock. The published macro does IMC and conversion in one 70 MHz
"global cycle", which here equals 12 clocks, so the SAR clock would be
840 MHz. That clock ratio is this design's choice.

| clock | phase    | what happens (model) |
|-------|----------|----------------------|
| 0     | Pre      | capacitors and input bitlines precharged to VDD (1200 mV) |
| 1     | DAC      | IBL = 1200 - 40 * x mV; each capacitor samples its column's IBL |
| 2     | Mul      | the word line selects a cell per cluster; a 0 pulls the capacitor back to VDD |
| 3     | Acc      | charge sharing: the line takes sum over columns of w * (VDD - V_IN); the ADC takes it over |
| 4..11 | SAR 0..7 | 7-bit conversion, one step per clock (section 3) |

The operation's inputs are registered when it is accepted. Its format is
registered again at Acc. The next operation can therefore be accepted in the
clock of the last SAR step, so back-to-back operations run one every 12
clocks. `res_valid` comes 14 clocks after acceptance: 12 clocks of operation,
one for the accumulators and one for the output select.

The model computes with integers. A voltage is an integer number of mV. The
charge on an output line is kept as a deficit below VDD, in units of
mV x C_MOM. With input code x the deficit is `40 * sum(w_i * x_i)`, which is
at most 40 x 1920 = 76 800. The physical line voltage would be
`VDD - deficit * C_MOM / (128 C_MOM + C_P)`. That scale factor is the same
for every slice, so only the ADC step size depends on it.

## 3. From charge to code: the charge-injection SAR ADC

This is the least obvious part of the design.

The ADC has no sampling capacitor DAC. Its "capacitor array" is the output
line itself. To subtract a reference step it fires *charge-injection (CI)
cells*, which are long-channel transistors that each take a fixed charge
packet off a line. Charge can only be taken away, never added. So the ADC
uses *monotonic switching*. After each comparison it lowers the line whose
voltage is higher, which is the line with less MAC charge, and the two lines
converge. Each ADC has 16 CI cells per side. The shared SAR control
(`sar_ctrl`) broadcasts one 16-bit enable pattern EN per step to all 32 ADCs.
Each ADC's own logic (`sar_adc_logic`) steers that pattern to the side its
comparator chose.

| step | EN   | bit decided | charge removed (LSB) |
|------|------|-------------|----------------------|
| 0    | FFFF | 6 (sign)    | 16 |
| 1    | FFFF | - (repeat step 0's side) | 16 |
| 2    | FFFF | 5           | 16 |
| 3    | FF00 | 4           | 8 |
| 4    | F000 | 3           | 4 |
| 5    | C000 | 2           | 2 |
| 6    | 8000 | 1           | 1 |
| 7    | 0000 | 0           | - |

The first decision needs a 32-LSB step. The 16 cells are fired twice to
make it, which saves 16 cells. Step 1 therefore reuses step 0's decision
instead of comparing again. The patterns are thermometer codes filled from
the top bit, so a pattern enables exactly as many cells as its step is wide.

One CI cell equals one ADC LSB, and `CI_UNIT` = 30 DAC codes x 40 mV. With
that LSB the 6-bit single-ended range spans the whole MAC range 0..1920
(128 columns x 15). The comparator model is ideal. If `Q+` and `Q-` are the
two line charges in LSB, the resulting codes are:

* differential (ternary weights): `code = floor(Q+ - Q-)`, clipped to
  -64..63, as a signed 7-bit value;
* single-ended (2's complement weights): the other slice of the pair keeps
  its output switch open and its capacitors at VDD, so its line charge is 0.
  Then `code = floor(Q_active)`, clipped to 0..63, and the sign bit is
  dropped.

When the '-' slice is the active one in single-ended mode, the per-ADC logic
swaps the roles of the two lines so that the result is still a positive
6-bit value (`swap` input). The measured line's decision is taken as the
complement of the *other* line's comparator output. An exact tie therefore
counts as "measured line at least as low", which gives the floor behaviour
above for either polarity. Both of these are this design's choices.

## 4. Weight formats

A weight of several bits is spread over several slices in the same column
and row, one bit per slice (or one ternary digit per pair). The digital
periphery then combines the ADC results.

* **2's complement, k = 1, 2, 4, 8 bits.** Bit j of the weight goes into
  pair (base + j) on one polarity, with the MSB in the lowest pair. The ADCs
  run single-ended, and the '+' and '-' slices of a pair hold different
  filters and take turns (`op_pol`). The MSB's partial sum counts negative.
  A 1-bit weight is taken as unsigned {0, 1}.
* **Ternary, 2, 3, 5 bits.** Each digit in {-1, 0, +1} uses both slices of
  a pair: '+' cell 1 gives +1, '-' cell 1 gives -1, and both 0 gives 0. The
  ADC runs differentially and does the subtraction. A k-bit ternary weight
  has k-1 digits, so it needs k-1 ADCs.

| `wcfg_e` | ADCs per weight | periphery output level | SEL<3:0> |
|----------|-----------------|------------------------|----------|
| W1_2S    | 1 | 0 (accumulator) | 0000 |
| W2_2S    | 2 | 1 | 1111 |
| W4_2S    | 4 | 2 | 1010 |
| W8_2S    | 8 | 3 | 1000 |
| W2_TER   | 1 | 0 | 0000 |
| W3_TER   | 2 | 1 | 0000 |
| W5_TER   | 4 | 2 | 0000 |

## 5. The digital periphery

The 32 ADCs form four groups of eight. Each group has eight serial
accumulators and one adder tree (`digital_periphery`).

* ADC `8g + m` feeds accumulator `#(7 - m)` of group g. The weight MSB sits
  in the lowest pair, so it lands on accumulator #7, the one with the
  largest tree weight.
* Accumulators #1, #3, #5 and #7 have a 2's complement module, driven by
  SEL<0..3>. It inverts the code, and the accumulator adder supplies the +1
  through its carry-in, so together they negate the MSB partial sum.
* Accumulator: `acc = code + cin` on the first cycle, and
  `acc = 16*acc + code + cin` on the second. An 8-bit input is sent as two
  operations, the high nibble with `op_first = 1` and then the low nibble
  with `op_first = 0`. Inputs of 4 bits or fewer need one operation.
* Adder tree: `l1 = 2*#(2i+1) + #(2i)`, `l2 = 4*l1[2i+1] + l1[2i]`,
  `l3 = 16*l2[1] + l2[0]`. Every level is an output.

With output level L, result `res[k]` is the MAC for the weight whose bits
sit in ADCs `k*2^L .. k*2^L + 2^L - 1`. Entries `k >= 32 / 2^L` are 0.
Checked against an independent model, this gives:

```
res[k] = sum_j c_j * V(ADC k*2^L + j),   c_j = 2^(2^L - 1 - j),  c_0 negated for 2's complement with L > 0
V      = code            (one operation)
       = 16*code_hi + code_lo  (8-bit inputs)
```

## 6. Interface of `capram_top`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock (SAR clock), asynchronous active-low reset |
| `mem_req`, `mem_we`, `mem_addr[8:0]`, `mem_wdata[127:0]` | in | normal SRAM access, one row per request |
| `mem_ready` | out | access is taken this clock (low during Pre/DAC/Mul/Acc) |
| `mem_rdata[127:0]`, `mem_rvalid` | out | read word, one clock after a read |
| `op_valid` / `op_ready` | in / out | IMC operation handshake |
| `op_x[127:0][3:0]` | in | one input nibble per column |
| `op_wl[2:0]` | in | row within the clusters (the layer) |
| `op_pol` | in | active polarity for 2's complement formats (0 '+', 1 '-') |
| `op_wcfg` | in | weight format (`wcfg_e`) |
| `op_first` | in | start a new sum (clear for the low half of an 8-bit input) |
| `res[31:0]` (20-bit signed), `res_level`, `res_valid` | out | results, see section 5 |

The SRAM cells have no reset. Write every row you use before you compute
with it.

## 7. Files

| file | contents |
|------|----------|
| `rtl/capram_pkg.sv` | sizes, the phase struct, `wcfg_e` and the format decode functions |
| `rtl/capram_top.sv` | the macro |
| `rtl/imc_slice.sv`, `rtl/imc_cluster.sv` | array behavioural models |
| `rtl/cs_dac.sv` | input DAC behavioural model |
| `rtl/cisar_adc.sv` | ADC comparator and CI cells, behavioural |
| `rtl/sar_adc_logic.sv`, `rtl/sar_ctrl.sv` | per-ADC SAR logic, shared SAR control |
| `rtl/imc_timing.sv`, `rtl/wl_driver.sv`, `rtl/sram_readout.sv` | timing, row drivers, readout |
| `rtl/digital_periphery.sv`, `rtl/twos_xform.sv`, `rtl/serial_acc.sv`, `rtl/adder_tree.sv` | shift-and-add periphery |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_cnn_workloads.sv` | the four layers of a pruned LeNet-5, then one ResNet-20 layer, mapped into the macro and run with random weights and inputs |

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_capram_top \
    rtl/capram_pkg.sv tb/tb_capram_top.sv -o sim && obj_dir/sim
```

`tb_capram_top` runs the full-size macro with default parameters. It writes
all 512 rows and reads rows back. It runs every weight format in both
single-ended polarities and in differential mode, with one- and two-cycle
inputs, issued back to back. It checks every result, the 12-clock operation
period, and ADC clipping. It builds in about a minute and runs in under a
second.

## 8. What is modelled and what is not

* **Ideal analog.** The DAC is exactly linear: 40 mV per code, from the
  published 1200 mV to 600 mV curve. Charge sharing is lossless. Switch
  charge injection and coupling are taken as cancelled, which is what the
  published design tunes its transistors for. The comparator has no offset
  or noise, and every CI cell is identical. The measured chip shows
  per-ADC offset and gain spread and about 0.35 LSB rms noise. None of that
  is modelled.
* **Calibration** (a per-ADC linear fit plus a master curve) was done off
  chip on measured data, and it is not part of this RTL. Nor are the clock
  source and the host interface of the test chip.
* **Departures and readings of an unclear source:**
  * Level-3 tree weight. The published tree diagram marks the level-3
    adder x8. Combining two 4-bit halves of an 8-bit weight needs x16,
    which is used here.
  * Second SAR step. The published waveform figure shows pattern FF00 in
    the second step after the sign. Here that step fires all 16 cells
    (FFFF), so that every step has a binary size.
  * MSB placement. The published mapping figure puts the weight MSB in the
    lowest slice pair, while the periphery figure places the sign module
    and the largest weight on accumulator #7. The reversed ADC-to-
    accumulator wiring of section 5 satisfies both.
* **This design's own choices:** one clock per array phase, 8 SAR clocks,
  the row-address layout, registered SRAM reads, the handshakes, the tie
  rule of the comparator, the polarity swap in single-ended '-' mode,
  1-bit weights taken as unsigned, and the periphery widths (12-bit
  accumulators, 20-bit results).

## 9. Capacity, by the published networks

* **LeNet-5 (MNIST, pruned, ternary plus 4-bit layers)** fits one macro.
  Its four layers take 1 + 1 + 4 + 1 = 7 of the 8 rows per slice. Its
  largest kernel, 5x5x5 = 125 inputs, fits in 128 columns. The first layer
  uses 8-bit inputs (two operations) and 4-bit 2's complement weights (4
  slices per filter, 5 filters). `tb/tb_cnn_workloads.sv` places C1 in row 0,
  the ternary C3 in row 1, FC5 in rows 2 to 5 and FC6 in row 6. It checks
  every result code against a reference model: C1 at all 576 output
  positions, and the other layers on 16 input vectors each. FC5 is taken
  as 64 neurons of 256 inputs (16 maps of 4x4, the usual LeNet-5 size).
  Each neuron is then split into two 128-input halves, giving four rows,
  and the two half-results are added outside the macro. The test also
  prints how far C1's results lie from the exact convolution on the
  macro's scale (one LSB = 30 units of input times weight). That distance
  comes from rounding: each 1-bit by 4-bit partial sum (at most 25 x 15 =
  375 units, about 12 LSB) is floored to whole LSBs before it is shifted
  by up to 16 x 8 and added.
* **ResNet-20 (CIFAR-10)** needs about 98 rows per slice across its layers,
  so it takes several macros; one macro holds any single layer except
  layers 15 to 19. Its 3x3x28 = 252-input kernels are split into two
  filters of 126 inputs each, whose results are added outside the macro.
  All filters in one operation see the same inputs, so the two halves go
  to different rows. `tb/tb_cnn_workloads.sv` loads one of layers 2 to 7
  this way after the LeNet-5 run. Half h of kernel k sits in row
  2h + k/16, and each row holds 8 kernels in each polarity. That gives 4
  rows, as the published mapping has. The test runs 4 input vectors of
  8 operations each and checks every result.
* **Peak rate:** one operation gives 32 ADCs x 128 MACs = 8192 operations
  (multiply and add counted separately). At one operation per 70 MHz global
  cycle that is 573 GOPS.
