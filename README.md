# Dual-8T SRAM compute-in-memory macro with charge-domain bit accumulation

This is SystemVerilog for an analog compute-in-memory (CIM) macro. The macro stores a weight matrix in
a 256 × 127 SRAM array. It multiplies the matrix with an input vector inside the array and delivers
one digital code per column. Inputs have 1 to 7 bits, weights 2 to 4 bits and outputs 1 to 7 bits,
all chosen at run time. The design follows the macro described in *A Reconfigurable Computing
In-Memory Macro with Charge-sharing-based Weighted Accumulator* (Yang, Dong, Fu, Shang, Basu). The
RTL was written from that description. It is not the authors' code.

The idea is to do the binary weighting of the input bits in the analog domain, so that the ADC runs
only once per operation:

* Inputs are applied **bit-serially**, least significant bit first, one bit per clock cycle. In
  each cycle every column's bit lines discharge in proportion to that bit's partial dot product.
* Each column has two equal capacitors. After every bit they **share charge**, which halves the
  stored voltage and adds half of the new partial sum. After `n_i` bits the stored voltage is the
  full multi-bit dot product divided by `2^n_i`. No per-bit conversion or digital shift-add is
  needed.
* A single **ramp ADC** then converts all 127 columns at once. The ramp comes from one shared
  *replica column* built from the same cells as the array. Each column keeps only a comparator
  and a counter.

An operation therefore takes about `n_i + 2^n_o` cycles. Conventional bit-serial conversion needs
`n_i · 2^n_o`, and pulse-width input needs `2^n_i + 2^n_o`.

## What is RTL and what is a model

The macro is mostly analog. The digital parts are the sequencer, the word-line drivers, the
reference-row gating, the weight-to-cell mapping and the per-column counters. These are ordinary
synthesizable RTL. The analog parts are written as *behavioural models*: the bitcell and array, the
replica column, the charge-sharing accumulator and the sense amplifier. They reproduce the ideal
transfer function with integers, so that the whole macro can be simulated end to end. They are not
circuits.

| file | kind | role |
|---|---|---|
| `cim_pkg.sv` | package | sizes, `cell_t`, `cfg_t`, `wmode_e`, `state_e`, value types |
| `cim_macro.sv` | RTL (top) | wires everything; weight-write port; reference in/out ports |
| `cim_ctrl.sv` | RTL | operation sequencer (MAC → calibration → ramp → done) |
| `rwl_driver.sv` | RTL | puts input bit `b` of input `g` on all rows of weight `g` |
| `weight_encoder.sv` | RTL | sign-magnitude weight → ternary content of each of its 1/3/7 cells |
| `adc_ref_driver.sv` | RTL | SADC gating of precharge and word lines; picks the Ini/Rp rows |
| `rct.sv` | RTL | per-column counter that turns comparator pulses into a binary code |
| `dual8t_cell.sv` | model | one dual 8T bitcell (storage and two read paths) |
| `dual8t_array.sv` | model | 256 × 127 cells, bit-line precharge and discharge summation |
| `ref_column.sv` | model | shared replica column generating the ramp |
| `cha.sv` | model | charge-sharing binary-weighted accumulator of one column |
| `sense_amp.sv` | model | double-differential comparator of one column |

The self-biased voltage buffers, which drive the ramp into the 127 comparators, are not in the RTL
because an ideal buffer is a wire. The ramp leaves the macro on `vadc_ref` and comes back on
`vadc_buf`. Tie the two together for an ideal buffer, or insert an offset model. The read-word-line
under-drive (a 0.8 V supply on the RWL buffers that makes the read transistor act as a cascode) is
also absent. It is a supply-level technique that improves linearity and has no logic function.

## The dual 8T cell and multi-bit weights

Each bitcell is two 6T SRAM cells side by side. The storage nodes `VL` and `VR` hold a ternary
weight. Each side has its own read path onto its own read bit line, RBLL or RBLR:

| stored `(VL,VR)` | weight | RWL = 1 | RWL = 0 |
|---|---|---|---|
| (H, L) | +1 | RBLL discharges one unit | nothing |
| (L, L) | 0 | nothing (zero skipping) | nothing |
| (L, H) | −1 | RBLR discharges one unit | nothing |

The difference between the two bit lines of a column is therefore Σ W·X for the bit on the word
lines. Weight-0 cells never conduct, so sparse weights save energy but not time.

A weight wider than 2 bits is stored **sign-magnitude** in several cells of the same column. All of
those cells share the input of that weight:

| weight bits | range | cells | magnitude bit 0 / 1 / 2 stored in slots | inputs per column |
|---|---|---|---|---|
| 2 | −1..+1 | 1 | 0 / – / – | 256 |
| 3 | −3..+3 | 3 | 0 / 1–2 / – | 85 |
| 4 | −7..+7 | 7 | 0 / 1–2 / 3–6 | 36 |

The sign chooses the side. For example, −5 = sign 1, magnitude 101 at 4 bits is stored as
−1, 0, 0, −1, −1, −1, −1. Weight `g` occupies rows `g·cells … g·cells + cells − 1`. Rows left over
at the end (1 row at 3 bits, 4 rows at 4 bits) are never driven.

## One operation, cycle by cycle

`cim_ctrl` runs the following sequence after `start` (configuration `cfg_in` is latched then):

| phase | cycles | what happens |
|---|---|---|
| `ST_MAC` | `n_i` | bit `b` = 0, 1, … of every input drives the word lines. The MAC bit lines are precharged at the start of the cycle. The accumulator samples the column voltage and shares it (`share`). SADC is low. |
| `ST_CALIB` | 1 | SADC high. The replica column is precharged (`PCH_ADC`) and `2^(n_o−1)` cells of weight −1 are pulsed together, giving `V_init = −2^(n_o−1)` units. |
| `ST_RAMP` | `2^n_o` | SADC high. Step `k` pulses one weight +1 cell without precharge, so the reference is `−2^(n_o−1) + k`. Every comparator is strobed and every counter counts when its comparator fires. |
| `ST_DONE` | 1 | `done` high. The codes stay valid until the next `start`. |

`busy` is high for `n_i + 1 + 2^n_o` cycles. SADC separates the two halves: the global precharge and
word-line strobes reach only the array while SADC is low, and only the replica column while it is
high (`adc_ref_driver`). An assertion in `cim_ctrl` checks that sharing and SADC never overlap.

Inside a real cycle, precharge, the RWL pulse and the S1/S2 switching follow one another. The
models fold that sequence into the rising edge that ends the cycle. The word-line inputs are
combinational, and bit-line state and accumulator state change on the clock edge.

## Charge-sharing accumulation

In each input-bit cycle, capacitor C_X1 first samples the column's differential MAC voltage
`V_MAC(i)`. It then shares charge with the equal capacitor C_X2:

    V_Acc(i) = V_Acc(i−1)/2 + V_MAC(i)/2        (both capacitors cleared before bit 0)

After `n_i` bits, applied LSB first:

    V_Acc = Σ_i V_MAC(i) · 2^i / 2^n_i = (Σ_g W_g · x_g) / 2^n_i

`cha.sv` holds `V_Acc` as a signed fixed-point number with `FRAC = 7` fractional bits, in units of
one cell discharge. Every share halves the value, and at most 7 shares happen between clears, so
the value is exact. No rounding error enters the model. The accumulators are held cleared while
the macro is idle.

## Shared-reference ramp conversion

The ramp is one discharge unit per step, the same unit as a MAC cell, because the replica cells are
identical to the array cells. In one conversion it takes the levels
`−2^(n_o−1) + k` for `k = 1 … 2^n_o`. A column's comparator fires in every step whose level is below
its `V_Acc`, and its counter counts those pulses. The ideal transfer function of the whole macro is:

    y    = Σ_g W_g · x_g
    code = min(2^n_o − 1, #{ k ∈ 1..2^n_o : (k − 2^(n_o−1)) · 2^n_i < y })

So code `2^(n_o−1) − 1` means `V_Acc` lies in (−1, 0]. The code is an offset-binary version of
`V_Acc` with a step of one unit, which is `2^n_i` in dot-product units. At 4-bit inputs that step is
16, the step size quoted for the 4-bit ADC. Example with `n_o = 2` and `V_Acc = 0.6`: the levels are
−1, 0, 1, 2, the comparator fires at −1 and 0, and the code is `10`.

The ramp has `2^n_o` steps, one more than an `n_o`-bit code can hold. If all of them fire, the
counter **holds at `2^n_o − 1`** instead of wrapping. This choice is not in the source. Values
outside the ramp's range clip to 0 or to full scale. Choosing `n_i` and the weight width so that
the dot products fit the range is left to the network mapping.

The replica column uses rows 0–127 (weight −1) for the initial voltage and calibration, and rows
128–255 (weight +1) for the ramp. Step `k` uses row `128 + k − 1`. Its weights are written while
`rst_n` is low.

## Interface of `cim_macro`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of the digital state. The replica column is written while reset is low, so hold reset for at least one clock edge. |
| `start`, `cfg_in` | in | start an operation while idle. `cfg_in.ni`/`.no` is 1..7 (0 is taken as 1); `cfg_in.wmode` is `W2B`/`W3B`/`W4B`. |
| `x[256]` | in | unsigned `n_i`-bit inputs, `x[g]` for weight `g`. Hold them stable while `busy`. |
| `busy`, `done` | out | see the timing above. |
| `code[127]` | out | 7-bit codes, of which the low `n_o` bits are used. |
| `wr_en`, `wr_wmode`, `wr_group`, `wr_slot`, `wr_wsign[127]`, `wr_wmag[127]` | in | while idle, write cell `wr_slot` of weight `wr_group` in all columns, one row per cycle. Weights are sign-magnitude. |
| `vadc_ref` / `vadc_buf` | out / in | reference ramp to the external buffers, and back. |

Analog values between the models are signed integers. `vmac_t` is the bit-line difference in
units. `vacc_t` is the accumulator value with 7 fractional bits. `vadc_t` is the ramp in units.

## Departures from the source and limits of trust

* **Latency.** The source quotes `n + 2^n` cycles. Its timing diagram shows the initial-ramp
  (calibration) step as its own phase after the last charge share, and this RTL spends one cycle
  on it. So every operation here is one cycle longer: 136 cycles at 7/4/7 bits, 4 cycles at 1/2/1.
* **Ideal analog behaviour.** Unit currents are exactly equal and bit lines are linear. The
  accumulator has no kT/C noise, charge injection or capacitor mismatch, and the comparator and
  buffers have no offset (`sense_amp` has an `OFFSET` parameter, 0 by default). The source reports
  these effects as well below one ADC step after its cascode and replica-biasing measures, but
  they are not reproduced here. The source's noise-aware training of networks is outside this
  design.
* **Ripple counter.** `rct` is a synchronous counter with the comparator output as count enable. A
  chain of toggle flip-flops clocked by the comparator would give the same count.
* **Choices where the source is silent:** the weight-write port, the start/busy/done handshake,
  saturation of the counter, the replica row order, the unused leftover rows, and reset of the
  replica cells.
* **Scope.** One macro computes one 256-input (or 85 or 36) by 127-output tile. Tiling larger layers
  across macros, partial-sum addition and buffers belong to a system around the macro and are not
  here. None of the networks evaluated in the source (an MLP, VGG-8, a ViT, Inception-V3) fits a
  single macro. For example, the MLP's 118,016 weights compare with 32,512 per macro.

## Simulating

Every file starts with a comment describing its block. With Verilator 5, from the folder that
holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl rtl/cim_pkg.sv rtl/*.sv tb/tb_cim_macro.sv \
              --top-module tb_cim_macro -j 8
    ./obj_dir/Vtb_cim_macro

Add `-Wno-MODDUP` if Verilator complains that the package is read twice. Each testbench prints
`TB_RESULT checks=N failures=M`. Available testbenches:

* `tb_cim_macro` is the end-to-end test at full size (256 × 127, default parameters). It runs seven
  operations (4/2/4, 1/2/1, 3/2/3, 5/3/5, 2/3/6, 7/4/7, 4/4/2 in input/weight/output bits), each
  with freshly written random weights and inputs. It checks all 127 codes of each operation
  against the integer formula above and checks the busy time. Positive weights are more likely
  in higher columns, so codes span the whole range. The test counts the mechanisms it exercises
  and fails if any never occurs: every weight width, single-bit and multi-bit accumulation,
  zero-skipped cells, negative dot products, code 0, counter saturation, and small and large
  output widths. Building the full array takes about five minutes of Verilator time; the run
  itself takes seconds.
* `tb_mlp_tiles` is a workload test at full size. It takes the 784-128-128-10 MNIST MLP at 4-bit
  inputs, ternary weights and 4-bit outputs, cuts its layers into 256 × 127 tiles (4 × 2, 1 × 2 and
  1 × 1 tiles) and runs one operation per tile. Weights are random with 50 % zeros, and every code
  is checked. Tile partial sums are not added across row tiles, because that is the system's job,
  not the macro's.
* There is one testbench per block: `tb_dual8t_cell`, `tb_dual8t_array` (32 × 5), `tb_ref_column`,
  `tb_cha`, `tb_sense_amp`, `tb_rct`, `tb_rwl_driver`, `tb_weight_encoder`, `tb_adc_ref_driver`
  and `tb_cim_ctrl`. The controller test covers all 49 combinations of `n_i` and `n_o`.

To change the array size, override `R` and `C` on `cim_macro`. The per-mode input counts follow
from `R`. The word widths in `cim_pkg` assume at most 256 rows and at most 7 input and output bits.
