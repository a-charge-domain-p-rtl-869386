# Charge-domain P-8T SRAM compute-in-memory macro (4-bit inputs, 8-bit weights)

This is a SystemVerilog model of a 256 x 80 SRAM compute-in-memory (CIM) macro. The macro
computes multiply-accumulate (MAC) operations between 4-bit input activations and 8-bit weights
inside the bit-cell array. The design follows the architecture in "A Charge Domain P-8T SRAM
Compute-In-Memory with Low-Cost DAC/ADC Operation for 4-bit Input Processing" (Kim, Lee, Park,
Korea University). Its main idea is to keep both data converters cheap:

* **DAC.** No input DAC circuit is needed. The 4-bit input is turned into a voltage by
  discharging a binary-weighted number of equal bit-line capacitors (8, 4, 2 and 1 of 16) and
  then shorting all 16 together. What remains is (16 - X)/16 of VDD.
* **Multiplication.** A PMOS pair in each bit-cell does the multiplication by one weight bit. The
  pair either leaves that voltage alone (weight 1) or pulls the line back to VDD (weight 0).
* **Accumulation.** Charge sharing onto an accumulation bit line (ABL) sums 16 such products.
* **ADC references.** The references come from the SRAM array itself. Sixteen reference columns
  run the same operation on a fixed input and a fixed stored pattern.
* **ADC.** A coarse-fine flash ADC with only 8 comparators reads each ABL to 4 bits. The partial
  MAC has 241 levels (0..240), but with 16 rows only the range 0..127 is resolved: anything
  above is clipped.

The analog parts are modelled with exact integer voltages (see "How analog values are
represented"). All results are therefore deterministic and bit-exact against a simple
arithmetic model. The model has no mismatch, noise or comparator offset.

## Organisation of the array

```
            AMU col 0    AMU col 1    AMU col 2    AMU col 3    AMU_REF col 4
AMU row 15  [16x16]      [16x16]      [16x16]      [16x16]      [16x16]   <- X15 / X_REF
   ...
AMU row 0   [16x16]      [16x16]      [16x16]      [16x16]      [16x16]   <- X0  / X_REF
             ABL 0..15    ABL 16..31   ABL 32..47   ABL 48..63   ABL_REF 0..15
                \___________ 64 coarse-fine flash ADCs ___________/   (references)
                                      add-shift -> 8 partial sums
```

* **P-8T cell.** A 6T cell plus two series PMOS devices from VDD to the computing bit line
  (CBL). P0 is gated by the stored W, P1 by the compute word line CWL, which is active low.
* **Local array (LA).** 16 cells on one CBL, plus a local peripheral circuit. That circuit holds
  NMOS N0 (gated by one input bit), the eMULTb switch from CBL to the internal bit line iBL and
  the eACC switch to the ABL. A type B circuit also has the PG_DAC switch to the next LA's iBL.
* **AMU (analog multiplication unit).** 16 LAs side by side, i.e. a 16 x 16 block. The input
  bit that drives each LA, and the LAs whose type B switch ends a segment:

  | LAs          | Input bit  | Type B switch at |
  |--------------|------------|------------------|
  | LA 0..7      | X[3]       | LA 7             |
  | LA 8..11     | X[2]       | LA 11            |
  | LA 12..13    | X[1]       | LA 13            |
  | LA 14        | X[0]       | LA 14            |
  | LA 15        | none (N0 gate tied low, always precharged) | - |

* **Array.** 16 x 5 AMUs. Array row `16*k + c` is cell row `c` of AMU row `k`. Array column
  `16*a + j` is LA `j` of AMU column `a`. LA `j` of all 16 AMU rows of a column share one ABL.
  Columns 0..63 hold weights. Columns 64..79 form the AMU_REF column that generates the ADC
  references.
* **Weight layout.** Column `8g + b` holds bit `b` of the weights of output channel `g`.
  Weights are two's complement by default (parameter `SIGNED_W`).

One operation uses 16 inputs `X0..X15`, one per AMU row, and one cell row `row_sel` in every
LA. It produces, for each of the 64 columns,

    pMAC[col] = sum_{k=0..15} X_k * W[16k + row_sel][col]        (0..240)

and from these 8 partial sums of 16 MACs each, i.e. 128 4b x 8b MACs.

## One operation, phase by phase

The controller (`cim_controller`) runs the phases below. Each phase lasts a fixed number of
ticks of a timing clock. With a 200 ps tick, the defaults reproduce the 0.9 V delay breakdown
reported for the silicon: precharge 1.0 ns, DAC 1.6 ns, MAC 0.4 ns and ADC 1.4 ns, which is
4.4 ns per operation.

| Phase       | Ticks | Asserted              | Effect |
|-------------|-------|-----------------------|--------|
| PCH         | 5     | `pch`                 | CBL, iBL, ABL to VDD (level 16) |
| DAC_EVAL    | 4     | `iact_en`             | Each segment whose input bit is 1 is discharged by its N0s to 0 |
| DAC_SHARE   | 4     | `e_dac`               | PG_DAC switches close. All 16 CBLs share charge, so every CBL is at 16 - X |
| MULT        | 1     | `rwl_en`, eMULTb low  | CBL cut from iBL, CWL[row_sel] low. A cell holding 0 pulls its CBL to 16, so CBL = 16 - X*W |
| ACC         | 1     | `e_acc`, eMULTb low   | Each ABL shares with its 16 CBLs |
| COARSE      | 3     | `coarse_en`           | ADC MSB: is the ABL at or below ABL_REF[8]? |
| FINE        | 4     | `fine_en`             | 7 comparators against ABL_REF[1..7] or [9..15] |
| (next tick) | -     | `addshift_en`         | Add-shift registers the 8 partial sums |

A new `start` is accepted in the last FINE tick. Operations can therefore run back to back:
* one operation every 22 ticks;
* the add-shift of one operation overlaps the precharge of the next;
* `psum_valid` rises 23 ticks after the accepting clock edge.

The 22-tick period and the four phase totals are the silicon's numbers. Two things are this
design's own assumptions, because the paper gives neither:
* how the DAC, MAC and ADC times are split into sub-phases;
* the tick clock itself (the silicon is self-timed).

## How analog values are represented

**Bit lines.** A bit-line voltage is an integer level in units of VDD/16, where 16 means VDD.
The DAC result for input X is `16 - X`, the paper's `V_DAC = (sum 2^i * not X[i] + 1) VDD/16`.
After multiplication the level is `16 - X*W`.

**ABL.** The ABL is carried as the numerator of the charge-sharing equation, in units of
`C_CBL * VDD/16`:

    abl_q = sum_i V_CBL,i + 16 * C_ABL_UNITS  =  16 * (16 + C_ABL_UNITS) - pMAC
    V_ABL = abl_q / (16 + C_ABL_UNITS) * VDD/16

Every ABL and ABL_REF has the same total capacitance (16 C_CBL + C_ABL). Comparing numerators
is therefore the same as comparing voltages. This keeps every value an exact integer, and it
makes the ADC decision independent of `C_ABL_UNITS`. That parameter is not known from the
silicon; its default is 4.

**References.** The AMU_REF column is driven with `X_REF = 1000b`, so its DAC level is half VDD
and a stored 1 contributes 8. Reference column N must store 1 in AMU_REF rows 0..N-1 and 0
elsewhere, in whatever cell row is selected. The model expects that pattern to be written like
any other weight; the simplest way is to put it in all 256 rows:

    W[r][64 + N] = ((r / 16) < N)

ABL_REF[N] then equals an ABL carrying `pMAC = 8N`, i.e. `(N/2 + 16 - N) VDD/16`. This gives
levels from VDD (N = 0) down to 17/32 VDD (N = 15), with ABL_REF[8] = 48/64 VDD.

## The coarse-fine flash ADC and the clipping it implies

`cim_cf_flash_adc` uses eight comparators.
* **Coarse.** One comparator, against ABL_REF[8], sets the MSB.
* **Fine.** A switch array then routes ABL_REF[1..7] (MSB = 0) or ABL_REF[9..15] (MSB = 1) to
  seven comparators. Their thermometer outputs are counted into O[2:0].

A comparator outputs 1 when the ABL voltage is at or below its reference, i.e. when pMAC is at
or above 8N. The resulting code is

    code = min(floor(pMAC / 8), 15)

Partial MACs of 128 and more (rare for real activations) all read as 15. This is the
"cutoff = 0.5" quantization chosen in the paper from its accuracy study: threshold 128 for the
8-bit pMAC range of 16 rows. A pMAC exactly on a reference resolves upwards. That tie rule is
this model's choice.

## Add-shift

`cim_add_shift` combines the codes of columns `8g .. 8g+7`:

    psum[g] = sum_{b=0..7} s_b * code[8g+b] * 2^b

Here `s_7 = -1` when `SIGNED_W = 1` (two's complement weights); otherwise every `s_b = +1`.
`psum` is a 13-bit signed value in ADC-code units. Multiply it by 8 for pMAC units, or by 4
in 8-row mode. The paper only names the add-shift step; the column order, the sign handling and
the scaling are this design's choices.

## 8 activated rows

The macro can also work with 8 activated rows (`rows8 = 1`). The input driver then gives AMU
rows 8..15 X = 0 and no CWL, so their CBLs stay at VDD and add nothing.

The references change too. With 8 rows the pMAC range is 0..120 (7 bits), and a cutoff of 0.5
means a threshold of 64, which is the setting the accuracy results quote for 8 rows. The driver
therefore feeds the reference column `X_REF8 = 0100b` instead of `1000b`. Each stored 1 then
contributes 4, ABL_REF[N] stands for pMAC = 4N, and

    code = min(floor(pMAC / 4), 15)        (8 rows)

The add-shift is unchanged, but one code step is now 4 pMAC instead of 8. How the silicon
builds 8-row operation, and how it moves the threshold, is not described. Gating rows and
changing the reference input are this design's assumptions. They reuse the reference mechanism
as it stands: the same column, a different input pattern.

## Normal SRAM mode

`sram_we` writes an 80-bit row at `sram_addr`. `sram_re` registers a row into `sram_rdata` on
the next edge. Both are only allowed while the macro is idle; an assertion checks this. Cell
contents are not reset, like a real SRAM.

## Files

| File | Contents |
|------|----------|
| `rtl/cim_pkg.sv` | sizes, level types, phase enum, LA-to-input-bit map, type B mask |
| `rtl/cim_p8t_cell.sv` | P-8T bit-cell (behavioural) |
| `rtl/cim_local_array.sv` | local array: 16 cells + type A/B peripheral (behavioural) |
| `rtl/cim_amu.sv` | AMU / AMU_REF: segments, charge-sharing DAC, multiplication (behavioural) |
| `rtl/cim_abl_accum.sv` | ABL column accumulation (behavioural) |
| `rtl/cim_array.sv` | 16 x 5 AMUs, 80 ABLs, SRAM row port (behavioural) |
| `rtl/cim_comparator.sv` | ideal strobed comparator (behavioural) |
| `rtl/cim_cf_flash_adc.sv` | 4-bit coarse-fine flash ADC |
| `rtl/cim_wl_driver.sv` | RWL / input-activation driver |
| `rtl/cim_controller.sv` | phase sequencer |
| `rtl/cim_add_shift.sv` | add-shift to 8 partial sums |
| `rtl/cim_macro.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_cim_resnet20_tile.sv` | a 3x3 convolution tile, 16 and 8 rows |

The behavioural files model analog circuits (bit lines, charge sharing, comparators) with
synthesizable integer arithmetic. They describe function, not circuits. The controller, driver
and add-shift are ordinary digital logic.

## Simulating

Every testbench is self-checking and ends with `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cim_pkg.sv tb/tb_cim_macro.sv \
          --top-module tb_cim_macro -o sim && ./obj_dir/sim
```

Replace `tb_cim_macro` with any other testbench name.

**`tb_cim_macro`** runs the full-size macro at its default parameters. It:
* writes all 256 rows and reads rows back;
* runs corner cases (all-zero inputs, full scale with clipping, pMAC exactly on a code step);
* runs random single operations over every `row_sel`, and a back-to-back burst in both row modes;
* checks clipping at pMAC 128 (16 rows) and at pMAC 64 (8 rows);
* checks every ADC code, every partial sum, the 23-tick latency and the 22-tick throughput;
* counts each mechanism (coarse MSB 0 and 1, clipping, 8-row mode, back-to-back, read-back) and
  fails if one never occurred.

It builds in under a minute and runs in well under a second.

**`tb_cim_resnet20_tile`** maps a convolution onto the macro:
* input channel k drives AMU row k;
* kernel tap t lives in cell row t;
* output channel g uses columns 8g..8g+7.

It computes 2x2 output pixels from 9 operations each and checks them against a model of the
macro. It also prints how far the quantized result lies from the exact convolution. The weights
and activations are synthetic. The network itself does not fit in the macro: 2048 int8 weights
against roughly 0.27 M for ResNet-20. Layer tiling and weight reloading are outside this design.

## Where this model departs from, or goes beyond, the paper

* **Type B positions.** The text of the paper names LA 1, 3, 4 and 7 as type B. Its AMU figure
  marks LA 7, 11, 13 and 14, which are the positions that separate the 8/4/2/1 segments. The
  model follows the figure.
* **Line names.** The lines are called ABL/ABL_REF in one place and AML/AML_REF/RML in another.
  They are treated as the same nets.
* **Ideal analog.** There is no mismatch, comparator offset or PVT variation. The paper's
  accuracy figures include such errors, so this model gives the error-free quantization only.
* **Chosen, not given.** These are all this design's own:
  * the tick clock and the sub-phase split;
  * the start/ready handshake and reset behaviour;
  * the SRAM port timing;
  * the address and weight-bit column order;
  * signed weights;
  * one `row_sel` shared by all AMU rows;
  * how 8-row mode is made, including `X_REF8 = 0100b` for the 8-row threshold of 64;
  * `C_ABL_UNITS`;
  * the comparator tie rule;
  * the counting thermometer decoder.
* **Not modelled.** Timing-control circuitry inside the phases, the bit-line sense path of
  normal SRAM reads, power and energy.
