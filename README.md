# A multiplication-free compute-in-SRAM macro

Neural-network layers are dominated by dot products, w·x. Doing them inside
an SRAM array avoids moving the weights, but a multibit product needs either a
DAC per row or many one-bit × one-bit cycles, and the analog result needs an
ADC per column. This design avoids both by replacing the dot product with
a multiplication-free correlation:

    w (+) x  =  Σ_i  sign(x_i)·|w_i|  +  sign(w_i)·|x_i|

Each term multiplies a magnitude by a sign, so it needs only a *one-bit* operand
on one side. In bit-plane form, a row of weight bits meets a vector of one-bit
column signals, and the number of cells that are `1 AND 1` is counted as
charge. The multiplication-free network replaces `w·x` with `α(w (+) x) + b` and
needs no separate nonlinearity.

The repository holds synthesizable RTL for the digital parts: cell array,
input/output channel, controller, SA register, post-processing and both
calibration engines. It also holds behavioural models of the two analog parts
(product/sum lines with their bit-line DAC, and the comparator), and the top
macro `mf_macro`. There is a self-checking testbench for every module.

## 1. Arithmetic: from the operator to counting discharged lines

With sign-magnitude operands, `sign(v) = 1 − 2·s(v)`, where `s` is the sign bit
(1 = negative). Let `step(v) = 1 − s(v)`. Then

    Σ sign(x)|w|  =  2·Σ step(x)|w|  −  Σ|w|
    Σ sign(w)|x|  =  Σ|x|  −  2·Σ s(w)|x|

Three sums have to come out of the array:

| sum | cells used | column signal CL | planes |
|---|---|---|---|
| `SA = Σ step(x)|w|` | `|w|` row b | `step(x)` | one per weight magnitude bit |
| `SB = Σ s(w)|x|` | sign row | bit b of `|x|` | 7 (`|x|` bits) |
| `SX = Σ|x|` | dummy all-ones row | bit b of `|x|` | 7, shared by both halves |

`Σ|w|` is a constant of the stored weights. It is pre-computed and given to
the macro (`wsum_l`, `wsum_r`). The result of one half is

    res = (2·SA − Σ|w|) + (SX − 2·SB)

Each plane yields a count between 0 and 31. The counts are weighted by 2^b and
added in `mf_accumulator`, which produces a 16-bit two's-complement result.
A typical operator would need n² one-bit plane products for n-bit
operands. This one needs about 2n planes.

## 2. The uArray

A uArray has 8 rows × 62 columns of 8T cells, split into two halves of
M = 31 columns. Each half holds one weight channel of up to 31 elements.

* Row 0 holds the sign bits (1 = negative).
* Rows 1..7 hold `|w|` bits 0..6, least significant first.
* A ninth, dummy row always reads as ones. It is built as constant cells.

A cell discharges its column's product line (PL) when its row line RL, its
column line CL and its stored bit are all 1 (`imc_bitcell_array`). Exactly one
row is selected per plane, so a PL stays charged unless that one cell and its
CL are both 1.

**Multiply-average (MAV).** For the computing half, the PLs are precharged to
VPCH = 1 V and the selected row and CLs are applied. The surviving charge of
the 31 PLs, plus a dummy PL, is then averaged onto that half's sum line
(SLL or SLR). All of this happens in one clock. The sum-line voltage is
proportional to the number q of PLs still charged. The number of products is
therefore `31 − q − pad`, where `pad` counts the padded columns (section 5).

**SRAM-immersed SA-ADC.** The PLs of the *other* half serve as the
capacitive DAC of a successive-approximation ADC. Its 31 PLs are grouped
binarily:

* group 0 = 1 PL;
* group 1 = 2 PLs;
* group 2 = 4 PLs;
* group 3 = 8 PLs;
* group 4 = 16 PLs.

For each trial code, the groups whose code bit is 1 are charged and averaged
onto the second sum line. The comparator compares the two sum lines. Both
halves have the same number of PLs and the same sum-line capacitance, so
the reference for code c is exactly "c lines charged". The ADC therefore
needs no capacitor array of its own. The computing half's dummy PL is
precharged to VPCH/2. This lifts the MAV by half a step, so a MAV of q
lies between reference levels q and q+1 with half a step of margin on each
side.

**Ping-pong.** While the left half computes, the right half converts. Then
the roles swap. When the right half computes, the MAV sits on the
comparator's − input, so the decision is inverted (`keep = ~out`).

## 3. Schedule and timing (`cim_controller`, `sar_logic`)

Every bit plane takes `1 + 2·ap` clocks:

* one MAV clock;
* then `ap` SA steps of two clocks each: DAC precharge, then sum, compare and register update.

`ap` (1..5) is the run-time ADC precision. Unresolved low code bits stay 0,
and the accumulator takes the middle of the bin.

Plane order for each half:

1. `|w|` rows, most significant first. `wp` (1..8, counting the sign) skips
   the low-significance weight rows: `wp − 1` magnitude planes.
2. The sign row against the 7 `|x|` planes.
3. Left half only: the dummy row against the 7 `|x|` planes, giving `SX` for
   both halves.

One complete operation (both halves) therefore takes

    T = (2·(wp − 1) + 21) · (1 + 2·ap)   clocks,

which is 385 at wp = 8, ap = 5, and 81 at wp = 4, ap = 1. The testbenches check
these counts. Per plane this matches the usual `W_P·(1 + 2·A_P)` count. The
`|x|`-plane passes, which that count does not include, cost the extra
`21·(1 + 2·ap)`.

## 4. The uChannel: inputs, stitching, outputs (`uchannel`)

Each column position holds one 8-bit sign-magnitude input word. The same
word drives column j of both halves. Words are loaded through a scan chain
(`si`, `si_en`): send `x[30]` first, most significant bit first, and `x[0]`
last, for 31·8 clocks. From each word the channel forms the CL of the current
plane: `step(x)` for weight planes, or bit b of `|x|`.

**Stitching.** uArrays are stacked. A column whose reconfiguration bit is
set (`cfg_we`, `cfg_d`) takes its word from the same column of the uArray
below it. It is also bypassed in the scan chain, so its bits are not loaded
again. An input vector shared by several filters is thus loaded once, into
the bottom uArray, and reaches the uArrays above without more scan cycles.

**Output.** The clock after `done` rises, the two 16-bit results are
copied into the output register, with the right half in the upper 16 bits.
With `so_en`, the register shifts out MSB first on `so`. The results are also
available in parallel (`res_l`, `res_r`).

## 5. Living with process variation

**Weak or strong product lines (`pl_cal`).** A PL whose capacitance is far
from nominal distorts every MAV. To measure it, the calibration:

* resets the sum line;
* charges the sum line through that single PL, one pulse per clock;
* counts pulses until the comparator sees the sum line cross REF = 0.5 V.

A small capacitor needs more pulses. With the model's sum line of 36
nominal PLs, a nominal line needs 26 pulses. Columns whose count lies
outside the band `[cnt_lo, cnt_hi]` are *padded*, not disconnected: every
write stores ones in them, and their CL is held at 1. They always discharge,
add only to the denominator of the average, and the accumulator subtracts
their number (`pad_l`, `pad_r`). A run over the 62 columns takes about
62·28 clocks. In the model, `cap_dev` is in units of 0.1 %, so ±12 % is ±120.

**Comparator offset (`comp_cal`, `sa_comparator`).** The comparator couples
two latches:

* an N-type one, which dominates for inputs near VDD;
* a P-type one, which dominates near ground.

Each module has its own offset. Calibration takes the P-type module, then
the N-type one:

1. Short both inputs at a common mode where that module dominates.
2. Fire the comparator 64 times and count the ones.
3. If the count is more than 6 away from 32, move one of the 2-bit left or
   right tail-current trims and repeat.

The rounds stop after 8 tries. With a 15 mV trim step, three steps cover an
initial offset of ±45 mV. The residue is below one step.

## 6. The macro (`mf_macro`)

`mf_macro` stacks NUA = 4 uArrays, so it holds 8 weight channels of ≤ 31
elements.

* The SRAM write port is shared; `wsel` selects the uArray.
* `start`, `wp` and `ap` are broadcast, and all uArrays run the same schedule.
* `busy` is the OR of the uArrays; `done` comes from uArray 0 and `all_done`
  is the AND of all.
* The calibration starts are broadcast, and each uArray calibrates itself.

A filter wider than 31 elements is split over several halves, and the
partial results are added outside the macro. Feature-map transfer and pooling
are also outside it.

| port group | meaning |
|---|---|
| `we wsel waddr whalf wdata`, `raddr rdata` | SRAM write of one half-row / row read |
| `si si_en cfg_we cfg_d`, `so_en so` | per-uArray input scan, stitching bits, serial output |
| `wsum_l wsum_r` | per-half `Σ|w|` of the weight planes in use |
| `start wp ap` → `busy done all_done res_l res_r` | one operation |
| `pl_cal_start cnt_lo cnt_hi` → `pl_cal_done pad_mask` | PL calibration |
| `comp_cal_start` → `comp_cal_done comp_trim` | comparator calibration |
| `cap_dev offset_n_uv offset_p_uv` | variation stimuli of the analog models (not circuit pins) |

Rules of use:

* Start an operation only when idle.
* Do not overlap the calibrations with each other or with an operation.
  Assertions in `uarray` check this.
* Run the PL calibration before writing the weights, so the padding is
  stored.
* Padded column positions should carry x = 0 and w = 0.

## 7. What is modelled, and where this RTL departs

* `pl_sl_model` and `sa_comparator` are behavioural: they use real numbers,
  uniform ±2 mV noise and ideal charge sharing, and they are not
  synthesizable. Leakage, the hold-voltage scheme of the cells and discharge
  timing are not modelled.
* The following are this design's own choices, not taken from the source
  description:
  * the sum-line capacitance (36 PLs);
  * the half-step dummy precharge;
  * the group-to-column assignment;
  * the trim step and sign convention;
  * the calibration counts and margins;
  * the row order of the `|w|` planes;
  * NUA = 4.
* The second operator term is formed from the stored sign bit,
  `Σ|x| − 2·Σ s(w)|x|`. This equals `2·Σ step(w)|x| − Σ|x|`.
* The latency includes the 7 `|x|`-plane passes per half and the shared `Σ|x|`
  pass, as described in section 3.
* The lower-precision 8×30 variant (15 columns per half, 4-bit ADC) is the
  same RTL with the parameters `M = 15` and `ADC_BITS = 4`. `tb_uarray_8x30`
  tests one uArray in that configuration.
* The digital processor that runs the layers left on the ordinary operator
  is not part of this RTL.

## 8. Files and simulation

| file | content |
|---|---|
| `rtl/mf_pkg.sv` | constants, plane-kind and state enums |
| `rtl/imc_bitcell_array.sv` | 8T cells, dummy row, product port |
| `rtl/pl_sl_model.sv` | behavioural PL / sum-line / bit-line DAC model |
| `rtl/sa_comparator.sv` | behavioural N/P comparator with trims |
| `rtl/sar_logic.sv` | SA register |
| `rtl/cim_controller.sv` | bit-plane schedule, row scanner |
| `rtl/mf_accumulator.sv` | plane sums and operator reformulation |
| `rtl/uchannel.sv` | scan chain, stitching, CL drive, output register |
| `rtl/pl_cal.sv`, `rtl/comp_cal.sv` | calibrations |
| `rtl/uarray.sv` | one uArray |
| `rtl/mf_macro.sv` | the macro (top) |
| `tb/tb_<module>.sv` | self-checking testbench of each module (`tb_mf_pkg` checks the constants for consistency) |
| `tb/tb_lenet_conv1.sv`, `tb/tb_lenet_conv2.sv` | LeNet-5 convolution layers on the macro |
| `tb/tb_uarray_8x30.sv` | uArray in the 8×30, 4-bit-ADC configuration |

Every testbench prints `TB_RESULT checks=N failures=F` and stops itself
through a watchdog. `tb_mf_macro` runs the macro at its default size. It
maps a 5×5 convolution layer with 8 filters onto the 4 uArrays, stitching
the shared input vector. It runs the PL calibration with two deliberately
bad columns, the comparator calibration with ±30 mV offsets, and full-precision and
reduced-precision operations, then reads all results back serially. It also
counts how often each mechanism occurred. Example with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
        rtl/mf_pkg.sv tb/tb_mf_macro.sv --top-module tb_mf_macro
    ./obj_dir/Vtb_mf_macro

Two workload testbenches run the first two convolution layers of a
LeNet-5 network on the default macro, with random weights and images:

* `tb_lenet_conv1` runs 6 filters of 5×5 over a 28×28 image, i.e. all
  24×24×6 outputs. The filters sit in the halves of uArrays 0..2, and the
  window reaches uArrays 1..3 by stitching.
* `tb_lenet_conv2` runs 16 filters of 5×5×6 over a 12×12×6 map. Each 150-element
  filter is split into five 30-element segments, placed in two passes over
  the four uArrays, and the partial results are added in the testbench.

Replace `tb_mf_macro` with any other testbench name. The testbenches draw
their stimulus from `$urandom`; the results are compared against reference
models written in the testbenches, not in the RTL.
