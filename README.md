# Deep in-memory inference processor on a standard 6T SRAM bank

In a conventional inference engine most of the energy and most of the waiting go into
fetching stored weights or templates out of SRAM. This processor does not fetch them at
all. It reads many bits of many words onto the bit-lines in one go and computes on the
bit-line voltages in the array periphery. It then reduces the 128 results of an access
to one number by charge sharing, and digitises only that number. The array is an
ordinary 512 x 256 6T SRAM (16 KB) and still works as a normal SRAM. The processing
circuits sit at column pitch above it.

Each decision passes through four stages:

1. **Multi-row functional read (MR-FR).** Four rows are pulsed at once with
   binary-weighted word-line pulse widths. Each column's bit-line swing is then
   proportional to the 4-bit number stored down that column.
2. **Bit-line processing (BLP).** One small mixed-signal unit per column pair either
   multiplies the read value by a query word P (dot-product mode, DP) or forms |D-P|
   (Manhattan-distance mode, MD).
3. **Cross bit-line processing (CBLP).** The 128 BLP outputs are charge-shared into one
   voltage, and two consecutive accesses are combined into one 256-word result.
4. **ADC and slicing.** Four slow single-slope ADCs take turns converting those
   results. A digital slicer turns the codes into a decision.

With these two modes, the same hardware runs four classifiers: an SVM (face detection),
a matched filter (gun-shot detection), template matching (face recognition, 64 classes)
and k-nearest-neighbours (digit recognition, 4 classes).

This RTL describes the whole chain. The digital parts are synthesizable: controller,
word-line pulse generator, array, periphery, ADC bank control and slicer. The analog
parts are written as ideal, cycle-accurate behavioural models: bit-line discharge, BLP,
CBLP and the ADC ramp/comparator. They carry voltages as exact integers, so the whole
design can be simulated, and its results checked, with an ordinary Verilog simulator.

## How a word is stored: column pairs and PWM word-lines

This storage scheme is the least familiar part of the design.

An 8-bit word is not stored along a row. It is split into two nibbles that run *down*
two adjacent columns (a "column pair"):

```
            column 2k (MSB column)   column 2k+1 (LSB column)
row 4r+0          D[4]                      D[0]
row 4r+1          D[5]                      D[1]
row 4r+2          D[6]                      D[2]
row 4r+3          D[7]                      D[3]
```

The four rows 4r..4r+3 form word-row r. The 256 columns give 128 column pairs, so one
word-row holds 128 words, and the array holds 128 word-rows (16 384 words).

A functional read precharges the bit-lines and then pulses the four word-lines
together. Row i is on for 2^i unit pulses (`fr_wl_driver`). A 6T cell storing 1 pulls
down BLB, and one storing 0 pulls down BL, for as long as its word-line is on. After the
pulses, each column's BLB swing therefore equals its nibble in unit swings, and the BL
swing equals 15 minus the nibble.

Reading all eight bits in one column would need pulses from 1 to 128 units wide. The
widest would lose linearity, and the narrowest would be too short to generate. With two
columns of four bits, the pulses only span 1 to 8 units.

The two nibbles are then recombined by charge sharing:

- `phi_con` opens and isolates 1/16 of the LSB column's bit-line capacitance.
- `phi_merge` shares the MSB bit-line's charge with that piece.

The result is proportional to 16·MSB + LSB, the whole 8-bit word. `mrfr_colpair` reports
exactly that integer.

**Replica cells.** Small replica rows sit on the same bit-lines. They hold the query P,
written directly over the replica write bit-lines (`replica_bca`). In MD mode they are
pulsed together with the data rows, holding the complement P̄. Each bit-line then sees
the sum of both discharges:

- dBLB = D + P̄ = 255 + (D − P)
- dBL = 255 − (D − P)

The subtraction has happened on the bit-lines, before any circuit looks at them.

## Bit-line processor

The BLP first samples the merged swings, which frees the bit-lines for the next
precharge.

- **DP mode.** The comparator is bypassed, and the mux passes dBLB = D to a capacitive
  multiplier. That multiplier is built from identical unit capacitors and takes the
  multiplicand one bit per step, LSB first. Each step shares charge so that
  `acc ← (acc + p_i·D)/2`, which after k steps leaves D times the k-bit number divided by
  2^k. An 8-step serial multiply would be slow, so there are two 4-bit multipliers in
  parallel: one uses P[7:4] and one uses P[3:0]. After four steps their outputs are
  D·P[7:4]/16 and D·P[3:0]/16. The model keeps them ×16, so they stay exact integers.
- **MD mode.** A comparator decides which of dBL and dBLB is larger (that is, whether
  D > P), and the mux passes the larger one. After the common 255-unit offset is removed
  against a reference, the value is |D − P|. The multiplier acts only as a sampler.

## Cross bit-line processing and the ADC bank

All 128 MSB multiplier outputs are shorted onto an MSB rail, and all LSB outputs onto
an LSB rail. `phi_con_rail` then splits 1/16 of the LSB rail off, and `phi_merge_rail`
shares it with the MSB rail. This reproduces the ×16 weighting, so the merged rail
voltage is proportional to sum(D·P) over the 128 words. In MD mode the merged rail
carries 16·sum|D−P|.

A 256-word vector needs two accesses. Their rail outputs go to two sampling capacitors
(even access on capacitor 0, odd access on capacitor 1). Shorting the two capacitors
gives the sum, which is what the ADC converts (`conv`, 24 bits in the model).

Each single-slope ADC (`ss_adc`) compares a ramp k·2^shift with its input while k
counts 0..255, one step per clock. The code is min(255, conv >> shift), and a conversion
always takes 256 cycles. `adc_shift` in the configuration sets the full scale. Because
one conversion spans many access cycles, `adc_bank` hands successive results to four
ADCs in round-robin order. If the ADC whose turn it is has not finished, the pipeline
stalls.

Expected ADC code per 256-word vector (exact in this model):

| mode | ADC input `conv` | code |
|------|------------------|------|
| DP | Σ D·P over 256 words | min(255, conv >> adc_shift) |
| MD | 16 · Σ \|D − P\| over 256 words | min(255, conv >> adc_shift) |

## Slicer and the four applications

`slicer` receives the codes in order: `n_conv_m1+1` codes per candidate vector, added
together, for `n_cand_m1+1` candidates. It then applies one of three modes:

| mode | used for | decision |
|------|----------|----------|
| `SLICE_THRESH` | SVM, matched filter (binary) | `score >= threshold` |
| `SLICE_ARGMIN` | template matching (64 classes) | index of the smallest score, first on ties |
| `SLICE_KNN` | k-NN (4 classes) | majority class of the k smallest scores; class = index >> `class_shift`; ties go to the class met first in distance order |

Sizes of the four applications and how they map onto this design:

| application | stored data | query | configuration |
|---|---|---|---|
| face detection (SVM) | 506 weights → 4 word-rows (zero-padded to 512) | 506 words, 4 replica sets | DP, `n_conv_m1=1`, THRESH |
| gun-shot detection (matched filter) | 256 samples → 2 word-rows | 2 replica sets | DP, THRESH |
| face recognition (template matching) | 64 faces × 256 px = the whole array | 2 replica sets | MD, `n_cand_m1=63`, ARGMIN |
| digit recognition (k-NN) | 4 classes × 16 images × 256 px = the whole array | 2 replica sets | MD, `n_cand_m1=63`, KNN, `class_shift=4` |

Candidate c of a multi-candidate run occupies word-rows `base_wrow + 2c` and
`base_wrow + 2c + 1`. For two conversions per candidate, it occupies four consecutive
word-rows. Access a of a candidate uses replica set a.

## Timing: the access pipeline

`dimc_ctrl` runs the accesses through two stages, each with its own small state machine:

| stage | phases (cycles at defaults) |
|-------|-----------------------------|
| A, array | precharge `T_PRE`=16 → PWM read 8 → `phi_con` open 1 → `phi_merge` 1 → hand-off 1 (BLP samples) |
| B, BLP/CBLP | DP: 4 multiplier steps × `T_MULT`=4; MD: 1 sampler cycle → rail share 1 → `phi_con_rail` open 1 → `phi_merge_rail` 1 → capacitor sample 1 → (odd access) hand to ADC |

Once the BLP has sampled the bit-lines, stage A starts precharging for the next access
while stage B finishes this one. An access therefore costs `T_PRE + 11` = 27 cycles,
which is 37 vectors of 128 words per µs at the 1 GHz controller clock. The chip is
quoted at 36 per µs.

Two stalls are possible:

- **ADC stall** (`stall_adc`): stage B waits for an ADC.
- **Hand-off stall** (`stall_blp`): stage A waits for stage B.

A 256-word conversion can be requested every 54 cycles, but four ADCs at 256 cycles
each accept one only every 64.25 cycles. Long runs such as template matching or k-NN are
therefore limited by the ADC bank and stall regularly.

Measured in simulation at the defaults (1 GHz):

| decision | cycles from start to decision | rate if run back to back |
|---|---|---|
| matched filter (256 words) | 333 = 2·27 + 20 + 1 + 256 + 2 | 3.0 M/s |
| SVM (512 words) | 387 | 2.6 M/s |
| template matching / k-NN (64 × 256 words) | 4335 | 0.23 M/s |

Decisions are not overlapped: `start` is taken only when `busy` is low. The chip's
published rates are not consistent with each other. The headline figure is 3.4 M
matched-filter decisions/s. An application table elsewhere quotes 18.5 M/s for the
matched filter and 312.5 K/s for template matching, which would need decisions and ADC
conversions to overlap far more than described. This RTL matches the 36 vectors/µs
access rate and lands near the 3.4 M/s headline.

## Using it

Top module `dimc_top` (package `dimc_pkg`). All ports are synchronous to `clk`, and
`rst_n` is an active-low asynchronous reset.

- **Normal SRAM port.** `n_we` / `n_re`, `n_row` (0..511), `n_sel` (0..3), 64-bit
  `n_wdata` / `n_rdata`. An access touches one physical row and the columns c with
  c % 4 == `n_sel`, with data bit j on column 4j + `n_sel` (a 4:1 interleaved column
  mux). Read data appears one cycle after `n_re`. Use the port only while `busy` is low;
  an assertion checks this. To store word k of word-row r, place its bits as in the
  column-pair table above. The functions `bit_row(r,b)` and `bit_col(k,b)` in `dimc_pkg`
  give the row and column of bit b.
- **Query port.** `p_we`, `p_set` (0..3), `p_grp` (0..15), `p_wdata`. Each write stores
  words 8·grp … 8·grp+7 of set `p_set`, with byte j of `p_wdata` going to word
  8·grp + j.
- **Decision.** Drive `rcfg` (`rcfg_t`) and pulse `start`. `dec_valid` pulses with:
  - `dec_class`: 0/1 for threshold, the candidate index for arg-min, the class for k-NN;
  - `dec_score`: the score.

  `busy` falls one cycle later. `code_valid` / `code` expose every ADC result.

`rcfg_t` fields: `mode` (DP/MD), `base_wrow`, `n_cand_m1`, `n_conv_m1`, `adc_shift`,
`slice`, `threshold`, `knn_k` (1..7), `class_shift`.

Parameters: `T_PRE`, `T_MULT`, `PWM_UNIT` (cycles per unit word-line pulse). Array
geometry, word width, ADC count and resolution are constants in `dimc_pkg`.

## What is modelled exactly, and what is not

- **Analog models.** `mrfr_colpair`, `blp_colpair`, `cblp` and `ss_adc` stand for analog
  or mixed-signal circuits. They are ideal: no noise, no offsets, no nonlinearity. The
  silicon they stand for has an MR-FR INL of about 0.03 LSB and a worst-case BLP+CBLP
  error of 5.8 % (DP) and 8.6 % (MD) of full scale. The models do not reproduce those
  errors, or the trade-off of bit-line swing against energy and accuracy. The numbers
  they produce are exact integers proportional to the ideal voltages (for example
  16·MSB + LSB instead of a merged swing scaled by 16/17). They are written in
  synthesizable style, but they describe intent, not circuits to be synthesized.
- **Word-line pulse width.** Pulses are whole clock cycles (`PWM_UNIT`). The real unit
  pulse is below 250 ps and needs a delay-line generator. Only the 1:2:4:8 ratio matters
  to the result.
- **Signedness.** D and P are unsigned 8-bit numbers. Signed SVM or matched-filter
  weights must be offset-encoded, and the offset terms folded into the threshold.
- **MD offset.** The MD mode's removal of the common 255-unit offset is assumed, to be
  done by a reference at the comparator/mux. The sample is assumed to go on the MSB rail
  only.
- **Word-level add.** MD mode always subtracts (replica read of P̄). Adding (reading P)
  is possible in the circuit but no application uses it, so it is not exposed.
- **Per-column comparison.** The BLP comparator can also serve as a per-column
  comparison of D with P. Its decision is available on `blp_colpair.cmp` but is not
  routed out of the core, since none of the four applications uses it.
- **Replica capacity.** The replica array holds four 128-word sets, enough for the
  506-word SVM query. The two read ports (one per pipeline stage) are a design choice.
- **Own choices.** These are not fixed by the chip description:
  - the ADC ramp clock (one step per 1 GHz cycle) and the `adc_shift` full-scale control;
  - round-robin ADC dispatch;
  - the slicer's score accumulation, tie rules and k-NN list size (up to 7);
  - the RCFG layout;
  - all phase lengths.
- **Not modelled.** Energy, the bit-line capacitor trimming of the 1/16 ratio, and the
  physical separation of the normal and functional peripheries.

## Files

| file | what it is |
|---|---|
| `rtl/dimc_pkg.sv` | constants, `rcfg_t`, mode enums, layout functions |
| `rtl/dimc_top.sv` | top: controller, core, ADC bank, slicer |
| `rtl/dimc_ctrl.sv` | two-stage access sequencer, RCFG latch, stalls |
| `rtl/dimc_core.sv` | array, periphery, replica, word-line driver, 128 MR-FR + BLP, CBLP |
| `rtl/sram_bca.sv` | 512×256 bit-cell array (normal row port, 4-row functional port) |
| `rtl/rw_periph.sv` | 4:1 column mux / sense amplifiers / write drivers of the normal port |
| `rtl/replica_bca.sv` | replica array holding the query |
| `rtl/fr_wl_driver.sv` | PWM word-line pulse generator |
| `rtl/mrfr_colpair.sv` | behavioural: bit-line discharge and sub-ranged merge of one column pair |
| `rtl/blp_colpair.sv` | behavioural: comparator/mux and sub-ranged bit-serial multiplier |
| `rtl/cblp.sv` | behavioural: rails, rail merge, sampling capacitors |
| `rtl/ss_adc.sv` | behavioural: single-slope ADC |
| `rtl/adc_bank.sv` | four ADCs with round-robin dispatch |
| `rtl/slicer.sv` | threshold / arg-min / k-NN decision |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_workloads.sv` | the four applications, many queries each |

`tb/tb_dimc_top.sv` is the end-to-end test at default parameters. It fills the whole
array through the normal port, runs the matched filter, SVM, template-matching and k-NN
decisions against references it computes itself, and checks the 333-cycle
matched-filter latency and the 27-cycle access period. It also confirms that DP and MD
runs, all slicer modes, ADC and hand-off stalls, normal reads and writes, and the
replica subtraction each happened. The data is random, not the original image and sound
data sets; template matching and k-NN use queries made as noisy copies of a stored
vector.

`tb/tb_workloads.sv` runs the four applications with many queries each, on synthetic
data generated in the testbench, and compares every decision with a reference computed
from the same ideal arithmetic. It also prints the accuracy against the ground truth and
the cycles per decision. With the random seed used during development it gave these
results:

| application | queries | accuracy | cycles per decision |
|---|---|---|---|
| template matching (64 random templates; query = template + Gaussian noise, σ = 12) | 64 | 64/64 | 4335 |
| k-NN (4 class prototypes, images = prototype + noise, σ = 50) | 40 | 39/40 | 4336 |
| matched filter (decaying burst; burst + noise at 3 dB SNR vs. noise of equal total power) | 100 | 85/100 | 333 |
| SVM shape (506 random weights and queries; checks only agreement with the reference) | 40 | n/a | 387 |

The matched filter loses accuracy because of the unsigned offset-binary encoding. The
large offset terms of sum((128+g)(128+x)) carry noise that a signed datapath would not
see.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_dimc_top rtl/dimc_pkg.sv tb/tb_dimc_top.sv --Mdir obj_top
./obj_top/Vtb_dimc_top
```

Replace `tb_dimc_top` with any other `tb_<module>` to test one block. The top-level test
builds in a few seconds and runs in well under a second.
