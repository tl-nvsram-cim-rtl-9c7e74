# TL-nvSRAM-CIM: a ternary compute-in-SRAM macro backed by three-level ReRAM

Compute-in-memory built from SRAM is fast, accurate and energy-efficient, but
SRAM is large, so a big network's weights do not fit on chip and must be
streamed in from DRAM. This macro puts a dense non-volatile store on top of
each SRAM cell. Every pair of SRAM cells carries 4 clusters of 60 three-level
ReRAM devices. Each device holds one **trit** (−1, 0, +1) of a weight. Before
computing, one trit per cell pair is copied into the SRAM pairs of the whole
array in one parallel step (*restore*). The SRAM then multiplies and
accumulates ternary weights with ternary inputs on its compute bitlines. A
different set of weights is only a restore away, and the chip can be switched
off without losing them.

The design follows the DAC paper *"TL-nvSRAM-CIM: Ultra-High-Density
Three-Level ReRAM-Assisted Computing-in-nvSRAM with DC-Power Free Restore and
Ternary MAC Operations"* (Wang et al.). The RTL here is an independent
rendering of that paper. The digital periphery (ternary encoder, input
driver, line decoder, controller, shift & adder) is synthesizable
SystemVerilog. The cell array and the ADC are analog in the real circuit, so
they are **behavioural models** that reproduce the digital outcome of each
operation.

---

## 1. Number formats

**Trits.** Weights and inputs are 5-trit balanced-ternary numbers. A value is
Σ t_k·3^k with t_k ∈ {−1, 0, +1}, so 5 trits span −121…+121. Weights are
assumed to be already quantised to that range. Activations arrive as signed
8-bit bytes. The ternary encoder clips them to ±121 and converts them on the
fly. Example: 67 → +1 −1 +1 +1 +1 (most significant trit first).

**Weight trit in an SRAM pair.** Each weight trit occupies two neighbouring
SRAM cells, left (Q1) and right (Q2):

| trit | Q1 Q2 | ReRAM state | nominal R |
|------|-------|-------------|-----------|
| +1   | 0 0   | LRS         | 80 kΩ     |
|  0   | 1 0   | MRS         | 282 kΩ    |
| −1   | 1 1   | HRS         | 1 MΩ      |

In `wr_data`/`rd_data`, cell *c* of a row is bit 2c (Q1) and bit 2c+1 (Q2).
Code 01 is never produced.

**Input trit on a row.** Each row has four input lines:

| trit | IN1 IN2 | INB1 INB2 |
|------|---------|-----------|
| +1   | 1 1     | 0 0       |
|  0   | 1 0     | 0 1       |
| −1   | 0 0     | 1 1       |

A row that is not active drives all four lines low.

## 2. Why a row discharges 1 − x·w

This is the core of the ternary MAC, and it is easy to lose in the
transistor-level picture. Each cell pair has four pull-down paths onto its
compute bitline (CBL). Each path is a series pair of transistors, with one
gate from the input and one from the stored data:

    STR1 (= INB2) · QB1      STR2 (= INB1) · QB2      IN1 · Q1      IN2 · Q2

Apply the codings above and count the conducting paths:

| input \ weight | +1 (Q=00) | 0 (Q=10) | −1 (Q=11) |
|----------------|-----------|----------|-----------|
| +1 (IN=11)     | 0         | 1        | 2         |
| 0  (IN=10)     | 1         | 1        | 1         |
| −1 (IN=00)     | 2         | 1        | 0         |

The count is always 1 − x·w. The CBL is precharged and discharges for a fixed
time. With 16 active rows, its voltage drop is therefore proportional to
16 − Σ x·w, which spans 0…32. The 5-bit ADC digitises that drop, and the
shift & adder turns it back into a signed partial sum: MAC = 16 − code.

A 5-bit code holds 32 levels but the drop has 33. The one case that does not
fit is all 16 products equal to −1 (count 32). It reads as 31, so that partial
sum comes out as −15 instead of −16. `adc_sat` flags it. The testbench
references model this clipping exactly.

## 3. The cell and its three operations

One **cell** is two 6T SRAM cells (Q1/QB1, Q2/QB2) plus M clusters of N
selector + ReRAM pairs. Device R_i_j sits behind cluster select SEL_i and
source line SL_j. Because every cell has the same (i, j), naming one (i, j)
selects one trit in *every* cell of the array. Store and restore work on the
whole array at once.

The controller (`array_ctrl`) steps through phases, and the decoder
(`sl_decoder`) turns each phase into line levels. The levels are symbolic:
GND, VSTR = 0.31 V, VDDL = 0.6 V, VDD = 0.9 V, VDDH = 1.5 V, floating.

| phase            | SEL_i | SL_j | other SLs | RSTR1/2 | STR1 | STR2 | CBL   | RST  | CTRL1/2 |
|------------------|-------|------|-----------|---------|------|------|-------|------|---------|
| store 1          | VDDH  | GND  | VDDL      | GND     | GND  | GND  | VDDH  | VDDH | on      |
| store 2          | VDDH  | VDDH | VDDL      | GND     | VDD  | VSTR | float | GND  | on      |
| restore 1        | GND   | VDDL | VDDL      | GND     | GND  | GND  | float | GND  | off, WL high |
| restore 2, left  | VDD   | GND  | VDDL      | VDD/GND | GND  | GND  | float | GND  | off → on / off |
| restore 2, right | VDD   | GND  | VDDL      | VDD/VDD | GND  | GND  | float | GND  | on / off → on |
| CIM              | GND   | VDDL | VDDL      | GND     | INB2 | INB1 | MAC   | VDD  | on      |

The idle state holds the CIM-mode levels with the input lines low. Unselected
clusters have SEL at GND. The supplies of the reference generators, V_R1 and
V_R2, are array-wide switches that follow RSTR1 and RSTR2. They sit at GND
when the RSTR line is low and at VDD when it is high.

* **Store** (SRAM → ReRAM). Phase 1 pulls SL_j low, which opens only the
  selectors on SL_j. The unselected selectors stay insulating, so no DC path
  exists. Every selected device is then reset to HRS. In phase 2, SL_j goes to
  VDDH and the device is set through up to two paths. The strong path uses
  STR1 = VDD and is enabled by QB1. The weak path uses STR2 = VSTR and is
  enabled by QB2. Both paths give LRS, one gives MRS, none leaves HRS.
* **Restore** (ReRAM → SRAM). Phase 1 precharges both storage nodes to 1. In
  phase 2, the left bit discharges Q1 through the device and QB1 through
  reference VREF1. When CTRL1 turns on, the latch resolves: Q1 = 1 for
  MRS/HRS and 0 for LRS. Then the right bit discharges Q2 through the device
  and QB2 through VREF2 (if Q1 = 1) or VREF3 (if Q1 = 0). When CTRL2 turns on,
  Q2 resolves: 1 only for HRS. This gives exactly the Q1Q2 coding of §1.
* **CIM**: see §2 and §4.

The model (`tlnv_array`) applies each step on the clock edge at which its
line levels are present. It does not trust the phase name. Restore resolves
on the rising edge of CTRL. `power_off` clears the SRAM and keeps the ReRAMs.

## 4. The CIM schedule and the shift & adder

A subarray has 256 rows in 16 **compute blocks** (CBs) of 16 rows, and 320
columns that form 160 cells and 160 CBLs. Five neighbouring CBLs hold the
five trits of one weight column, most significant leftmost. They share one
5:1 MUX and one ADC, so a subarray has 32 ADCs and 32 outputs.

One CIM command runs this loop:

    for i in input trits, most significant first    (5)
      for b in compute blocks                        (16)   CB b sees trit i in CIM cycle b + 16*i
        for k in the 5 CBLs of each weight, MST first (5)   one ADC conversion per clock

That is 5 × 16 × 5 = **400 clocks**, plus one clock of ADC latency and one of
accumulation. `result_valid` pulses 401 clocks after the command is accepted.
There are 16 input encoders. Encoder *k* serves row *k* of every CB, so the
16 encoders drive the active block in parallel.

The shift & adder behind each ADC works in base 3. A "shift" is ×3, computed
as (x << 1) + x:

    mac   = 16 - code
    wsum  = k_first ? mac : 3*wsum + mac                   -- over the 5 weight trits
    acc   = (first CB of first trit) ? wsum
          : (first CB of a later trit) ? 3*acc + wsum      -- next input trit
          : acc + wsum                                     -- next compute block

At the end, `acc` = Σ_rows X_r · W_r, where X_r and W_r are the 5-trit values
of the activation and the weight. That is an exact 256-long dot product
whenever no ADC conversion clipped. The largest magnitude is
256 × 121 × 121 = 3,748,096, so results are 24-bit signed.

## 5. Capacity

| level    | SRAM       | ReRAM trits                          | 5-trit weights |
|----------|------------|--------------------------------------|----------------|
| cell     | 2 bits     | 4 × 60 = 240                         | 48             |
| subarray | 256 × 320  | 256 × 160 × 240 = 9,830,400          | 1,966,080      |
| macro    | 6 subarrays| 58,982,400                           | 11,796,480     |

This is enough for ResNet-18 on CIFAR-10, about 11.2 M weights, and the
reason for six subarrays. VGG-9, about 3 M weights, fits easily. Only one
(i, j) set is live in the SRAM at a time. A network is run by alternating
restore and CIM as the weight-mapping scheme places its blocks: each layer's
(C·k·k) × (M·5·2) weight matrix is cut into 16-row by 320-column blocks,
which are spread over subarrays and then over ReRAM indices j.

## 6. Module map

    tlnv_macro                  top: NSUB = 6 subarrays, one broadcast command stream
     └─ tlnv_subarray           one 256 x 320 subarray
         ├─ array_ctrl          command FSM, phase timing, CIM schedule + tags
         ├─ sl_decoder          phase + (i, j) -> level of every array line
         ├─ input_driver        16 encoders, row drive of the active block
         │   └─ ternary_encoder 8-bit -> 5 balanced trits + row coding
         ├─ tlnv_array          behavioural model: SRAM, ReRAM clusters, restore, CBLs
         ├─ mux_adc  x32        behavioural model: 5:1 MUX + 5-bit ADC
         └─ shift_adder x32     base-3 recombination
    tlnv_pkg                    shared types (trit, codings, levels, phases, commands)

## 7. Using the top (`tlnv_macro`)

* **Reset**: `rst_n` is asynchronous and active low. It resets the
  controllers, ADC registers and accumulators. SRAM and ReRAM contents are
  not reset.
* **Write weights**: with the macro idle, set `wr_en` and give `wr_sub`,
  `wr_row` and `wr_data`. One row is written per clock. `rd_sub`/`rd_row` →
  `rd_data` is a combinational read. An assertion rejects writes while an
  operation runs.
* **Commands**: drive `cmd` (`CMD_STORE`, `CMD_RESTORE`, `CMD_CIM`) together
  with `cmd_cluster` (i) and `cmd_sl` (j), and hold `cmd_valid` high until
  `cmd_ready` is high. All subarrays take the command together. `done` pulses
  one clock after the last phase. With the default phase lengths, a store
  takes 4 clocks, a restore 8, and a CIM 400 + 1.
* **CIM**: hold `act[s][r]` (signed bytes) stable for the whole operation.
  When `result_valid` pulses, `result[s][a]` holds output *a* of subarray
  *s*. `in_sat` reports clipped activations and `adc_sat` reports clipped
  conversions.
* **Power**: assert `power_off` for at least one clock to model a power
  cycle. The weights come back with a RESTORE.

The phase lengths are parameters of `array_ctrl` (`T_ST1`, `T_ST2`,
`T_PRE`, `T_DIS`, `T_AMP`). The paper gives no timing for them.

## 8. What follows the paper and what does not

Taken from the paper: the cell structure and its four computing paths, the
weight and input codings, the line levels of every mode, the store and
restore sequences and the reference scheme, 256 × 320 subarrays, 16 active
rows, a 5-bit ADC shared by 5 CBLs, six subarrays, 4 clusters × 60 ReRAMs,
8-bit inputs as 5 trits, and the block-then-trit CIM order.

This design's own choices:

* **Analog behaviour is reduced to its digital outcome.** Every restore
  succeeds. The paper's restore yield under device variation (above 94 % for
  60 devices per cluster) and the resistance spread of programmed devices are
  not modelled. The CBL is an integer count of cell currents, and the ADC is
  ideal apart from clipping at 31.
* **Reference resistances** are 150 kΩ (VREF1, and VREF3) and 531 kΩ (VREF2),
  the geometric means of neighbouring states. The paper says only that they
  come from series ReRAMs.
* **Store phase 2.** The paper's text names the N15–N16 path (gated by QB1)
  for the MRS case Q1Q2 = 10. The schematic's gate labels make that path
  conduct only when Q1 = 0. The model counts conducting set paths, which gives
  the MRS result both sources agree on. The unused code 01 would also store
  MRS.
* **Activations are signed bytes clipped to ±121.** The paper applies
  8-bit-then-truncate quantisation to weights. How inputs outside the 5-trit
  range are handled is not stated.
* **Encoder sharing.** The paper says the encoder is shared by 16 rows. Here
  encoder *k* serves row *k* of each compute block.
* **Ordering and timing.** Input trits and weight trits are processed most
  significant first. The phase durations, the valid/ready command handshake,
  the write/read port, the broadcast of commands to all subarrays and the
  modelling of power loss as all-zero SRAM are all this design's choices.
* **Outside the macro.** The binary activation buffer, the post-processing
  and the weight-mapping software are not part of the RTL.

## 9. Simulating

Each file in `rtl/` holds one module or package, named after the file. With
plain Verilator 5:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/tlnv_pkg.sv $(ls rtl/*.sv | grep -v tlnv_pkg) \
        tb/tb_tlnv_macro.sv --top-module tb_tlnv_macro
    ./obj_dir/Vtb_tlnv_macro

The package must come first. The full-size macro takes about two minutes to
compile and one second to run. Each testbench prints one
line, `TB_RESULT checks=N failures=M`. Each has a watchdog that counts a
failure if the simulation hangs.

| testbench               | what it shows |
|-------------------------|---------------|
| `tb_ternary_encoder`    | all 256 inputs: value, digit range, row coding, clipping; the 67 example |
| `tb_input_driver`       | every block × trit: right rows, right coding, idle rows quiet |
| `tb_sl_decoder`         | every phase: line levels equal the table of §3 |
| `tb_array_ctrl`         | phase lengths, handshake, the 400-step CIM schedule and its tags |
| `tb_tlnv_array`         | full-size store/restore of all three states, two ReRAM sets, power loss, CBL counts |
| `tb_mux_adc`            | MUX selection, clipping, latency |
| `tb_shift_adder`        | full schedules of random codes against the closed-form sum |
| `tb_tlnv_subarray`      | one subarray end to end, 401-clock latency, ADC saturation |
| `tb_tlnv_macro`         | the whole macro at full size: two weight sets, stall, power cycle, two CIM runs |
| `tb_conv_layer`         | a first convolution layer (3 → 64 channels, 3 × 3) mapped on two subarrays |

`tb_tlnv_macro` runs the macro with every parameter at its default (6 × 256 ×
320 cells, 4 × 60 ReRAMs each). It counts every mechanism: both store phases,
the precharge and both restore amplifications, CIM, ADC saturation, input
clipping, a command stalled by a busy macro, and power-off. A mechanism that
never occurs counts as a failure. Expected results are computed in the
testbench in two ways: as the exact dot product, and with the ADC clipping
replayed per conversion.
