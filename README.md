# Time-domain SRAM compute-in-memory macro with bit-line ADCs

This is RTL for a 16 Kb SRAM compute-in-memory (CIM) macro that multiplies 4-bit
activations with 4-bit weights. It accumulates 64 products per column in the
analog domain and reads each column out as a 9-bit signed number. The design
follows the macro published as "A 137.5 TOPS/W SRAM Compute-in-Memory Macro with
9-b Memory Cell-Embedded ADCs and Signal Margin Enhancement Techniques for AI Edge
Applications" (Wang et al.). The digital parts are given as synthesizable
SystemVerilog. The analog parts (the time converter, the bit lines and the sense
amplifier) are given as behavioural models with the real parts' ports.

The main idea is that one physical mechanism does both jobs:

* **MAC.** Each SRAM cell has a discharge branch. A pulse on the cell's sense line
  drains a nearly constant current from a bit line for as long as the pulse lasts.
  So the voltage drop is (pulse width) x (stored bit). Pulse widths encode the
  activation and the bit weight, and the drops of 64 rows add up on the line.
* **ADC.** The same two bit lines, RBL and RBLB, are then read out by a binary
  search. The same kind of branch, driven by the same pulse generator, discharges
  whichever line is higher by a halving amount, and a sense amplifier compares the
  lines after each step. No separate capacitor DAC or ADC exists. Because MAC and
  conversion use the same current and the same capacitors, the two scales match
  by construction.

Two measures widen the signal margin, which is the distance between neighbouring
MAC levels compared with their noise:

* **MAC-folding.** Activations are shifted by -8 before the MAC, so they become
  signed, and the shift is undone digitally afterwards.
* **Boosted clipping.** MAC pulses are doubled while the readout range stays fixed.
  Values that then fall outside the range are clipped.

## Organisation

| level  | count                 | contents |
|--------|-----------------------|----------|
| macro  | 1                     | IA/OA buffers, configuration, 4 cores in lockstep |
| core   | 4                     | 16 column engines, one DTC, one pulse path, one controller |
| engine | 16 per core           | 64 rows, an RBL/RBLB pair, one sense amplifier (SA), readout logic, unfolding adder |
| row    | 64 per engine         | one 4-bit weight in four 9-T cells: W[3] sign, W[2:0] magnitude |

The total is 4 x 16 x 64 x 4 b = 16 Kb. All 16 engines of a core see the same 64
activations, because a row's sense lines run across the core. Each engine holds
its own weight vector. One operation produces 64 dot products of length 64, one
per engine.

Number formats:

* **Weights** are sign-magnitude, -7..7.
* **Activations** are unsigned, 0..15.
* **Inside the array**, an activation is ACT-8 in sign-magnitude (see MAC-folding).
* **A product's sign** is the XOR of the two sign bits (`sign_logic`). A positive
  product discharges RBL and a negative one discharges RBLB. After the MAC, the
  line difference d = V(RBLB) - V(RBL) is the signed sum.

## Units used throughout the RTL

Pulse widths are carried as integers counting the unit width dt. Bit-line voltages
are integers counting the drop that one branch causes in one dt (I0*dt/C). So a
row with folded activation a and weight w removes |a|*|w| units from one line, or
twice that when boosted.

The bit lines start each operation pre-charged to `VPRE` = 8192 units. That is
enough for the largest boosted MAC on one line (64 x 8 x 7 x 2 = 7168), plus some
readout. A line cannot go below 0.

## One operation, slot by slot

`cim_ctrl` runs 15 slots of one clock each:

| step | slot | pulses | SA |
|------|------|--------|----|
| 0 | pre-charge RBL and RBLB | none | - |
| 1 | A[2]*W | SL[j] of rows with magnitude bit 2 set: 16, 8, 4 dt for j = 2, 1, 0 | - |
| 2 | A[1]*W | 8, 4, 2 dt | - |
| 3 | A[0]*W | 4, 2, 1 dt | - |
| 4 | A[C]*W | 4, 2, 1 dt on rows with the compensation bit | - |
| 5 | sign | none | compare |
| 6..14 | readout bit n = 8..0 | SL[3] (sign cells) of a cell group, 2^n ADC LSB in total, discharging the line the last compare found higher | compare |

The width on SL[j] in a MAC slot for activation bit k is 2^(k+j) dt. So the cell
holding W[j] removes 2^k x 2^j units, and the four slots together remove
|a| x |w|. The sign cells hold only W[3]. That bit feeds the sign logic and never
a branch. This leaves their 64 branches free for the readout, and that is why the
readout can use up to 64 cells.

The SA result of each step is latched at the clock edge that ends the slot. The
next step reads it to pick the line to discharge. The last result arrives in the
clock after step 14, which may already be step 0 of the next operation: the
pre-charge does not disturb the latched SA. This gives the following timing:

* `done` of a core comes 16 clocks after the edge that accepted `start`.
* `done` of the macro comes one clock later, when the output buffer has the results.
* Operations issued back to back complete every 15 clocks.
* At 200 MHz, 15 clocks give 4 x 16 x 64 x 2 = 8192 operations per 75 ns, which
  is 109 GOPS.

## MAC-folding

After ReLU, activations cluster at small values, and short pulses are the
noisiest. Subtracting 8 moves most activations to larger magnitudes. It also
roughly halves the range the bit lines must cover.

`act_fold` turns ACT into a sign and a 3-bit magnitude. -8 (ACT = 0) does not fit
in 3 bits, so it is sent as magnitude 7 plus the compensation bit ACT[C]. That bit
has its own MAC slot, which adds one more 1 x W.

The array therefore computes sum((ACT-8)*W). `out_unfold` adds back
8*sum(W), expressed in code LSBs:

    out = code + sum(W) << (2 + boost - adc_scale)

The estimate of sum(ACT*W) is then out * 2 * 2^adc_scale / (boost ? 2 : 1), within
one LSB as long as the readout did not clip. sum(W) is formed from the stored
weights by an adder over the 64 rows of the column.

## The readout: a binary search on two bit lines

This is the least obvious part. Let d be the line difference in ADC LSBs (one LSB
is 2^adc_scale units). The search goes like this:

1. The sign compare gives s8 = 1 if RBL is higher, that is if d < 0.
2. In step n (n = 8..0), the higher line loses 2^n. RBL is pulled down when the
   last result was 1, so d grows by 2^n; otherwise d shrinks by 2^n. The SA then
   compares again.
3. The nine results that steered the steps are S = {s8..s0} = {sign, bit8, ..., bit1}.
   After the steps the lines are within one LSB of each other, so
   d ~ 511 - 2S.

The 9-bit two's-complement code is therefore

    code = 255 - S = {s8, ~s7, ..., ~s0}      (adc_sar)

The code equals floor(d/2), clipped to -256..255. An input range of about +/-512
LSB maps onto codes -256..255, which is the transfer curve the source reports. The
tenth result (bit0, the compare after the last step) tells on which side of the
final level d lies. It is kept in `sa_bits[0]` and in the `oa_sa` output, but is
not part of the 9-bit code.

Anything beyond +/-512 LSB saturates, with all search steps going the same way.
That saturation is the clipping of the boosted-clipping scheme. With `boost` set,
the DTC doubles every MAC pulse but not the readout pulses. The MAC step per
product doubles against a fixed readout range, and results beyond that range clip.

Each readout step must remove 2^(n+s) units. `pulse_path` makes this as
(number of cells) x (pulse width). The 64 sign cells are split into groups of
32, 16, 8, 4, 2, 1 and 1 rows (rows 0-31, 32-47, 48-55, 56-59, 60-61, 62, 63).
This design uses:

* 2^u cells at 1 dt while u = n+s <= 5;
* the 32-cell group at 2^(u-5) dt above that.

`adc_scale` = 0, 1 or 2 thus sets an ADC LSB of 1, 2 or 4 units. The full-scale
range is then +/-512, +/-1024 or +/-2048 units, against a folded MAC range of
+/-3584.

## What is modelled and how far to trust it

* **Synthesizable logic:** `act_fold`, `pulse_path`, `weight_array`, `sign_logic`,
  `adc_sar`, `cim_ctrl`, `out_unfold`, `io_buffer`, `cim_core`, `cim_macro`.
* **Behavioural models:** `dtc` and `rbl_analog`. They are exact integer models of
  an ideal circuit: constant discharge current, no noise, no mismatch, no DTC
  jitter. They compute what the circuit is meant to compute. They say nothing
  about the accuracy figures of the silicon.
* **Sense-line drivers** are analog buffers and appear as plain wires.
* **Fixed by the source:** the sizes (4 cores, 16 engines, 64 rows, 4-bit operands,
  9-bit output), the sign-magnitude weight and the sign cell, the pulse-width
  table, the slot order, the folding by 8 with a compensation slot, the
  readout-cell group sizes, and a boost that doubles the MAC pulse resolution.
* **Choices of this design**, where the source is silent:
  * the code mapping of the search results, and not using the last compare;
  * the table of cell counts and widths per readout bit, the row order of the
    groups, and the limit of `adc_scale` to 0..2;
  * one clock per slot and the start/busy/done handshake;
  * the pre-charge level;
  * where sum(W) is formed;
  * the host interface, buffers and configuration register;
  * folding is always on. The source gives no pulse entry for an unfolded fourth
    activation bit.
* **Throughput.** The source quotes 109.2-136.5 GOPS. The 15-slot sequence here
  gives the lower figure at 200 MHz. How the upper figure is reached, which would
  be 12 clocks per operation, is not described, and is not built.

## Module hierarchy

    cim_macro
      io_buffer                     IA buffer, config register, OA buffer
      cim_core x4
        cim_ctrl                    slot sequencer
        act_fold x64                MAC-folding encoder per row
        dtc                         pulse widths 2^p dt (behavioural)
        pulse_path                  widths onto SL[3:0] of each row
        weight_array                64 x 16 x 4 b cell storage
        per engine x16:
          sign_logic                product sign -> RBL or RBLB
          rbl_analog                bit lines and SA (behavioural)
          adc_sar                   search steering and code
          out_unfold                + 8*sum(W)

`cim_pkg` holds the sizes, the `act_fold_t` and `cim_cfg_t` structs and the
`mac_slot_e` enum.

## Host interface of `cim_macro`

* `w_we`, `w_core`, `w_row`, `w_col`, `w_data` write one weight per clock as
  {sign, magnitude}. The cells are not reset.
* `act_we`, `act_addr` = {core, row}, `act_wdata` write one activation per clock.
  Activations must not change during steps 1..4 of an operation.
* `cfg_we`, `cfg_wdata` = {adc_scale[1:0], boost} set the configuration. Change it
  only between operations.
* `start` starts an operation on all cores. `busy` is high while slots run. `done`
  pulses when the output buffer holds the new results. Holding `start` high
  chains operations back to back.
* `oa_addr` = {core, col} reads back one engine combinationally. It returns:
  * `oa_out`: the unfolded result, 14-bit signed;
  * `oa_code`: the 9-bit readout code;
  * `oa_sa`: the ten raw SA results.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The reference values are computed in the
testbench from the equations above, not taken from the RTL. To build and run one
with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module cim_macro_tb \
      -y rtl -y tb +libext+.sv -Irtl rtl/cim_pkg.sv tb/cim_macro_tb.sv
    ./obj_dir/Vcim_macro_tb

Replace `cim_macro_tb` by `act_fold_tb`, `dtc_tb`, `pulse_path_tb`,
`weight_array_tb`, `sign_logic_tb`, `rbl_analog_tb`, `adc_sar_tb`, `cim_ctrl_tb`,
`out_unfold_tb`, `io_buffer_tb` or `cim_core_tb` to run the other testbenches.

`cim_macro_tb` runs the full-size macro at its default parameters. It takes about
a second. It:

* writes all 4096 weights through the host ports;
* runs six single operations over the boost and scale settings, with random,
  near-zero and extreme activations, and three back-to-back operations;
* reads all 64 results after each;
* compares code, raw SA results and unfolded output bit-exactly with its own
  bit-line model;
* checks that every in-range result is within one LSB of the exact dot product;
* counts positive and negative products, compensation rows, boost, scale,
  clipping at both ends, and back-to-back operation. It fails if any of these
  never occurred.

`cim_core_tb` does the same for a single core.

To change the size, edit `cim_pkg`:

* `ROWS` must stay 64, because the readout-cell grouping assumes it.
* `COLS` and `CORES` are free.
* `VPRE` is a parameter of `cim_macro`, `cim_core` and `rbl_analog`.
* To study noise, add it to `rbl_analog`'s drop computation. The
  rest of the design is agnostic to how the drops arise.
