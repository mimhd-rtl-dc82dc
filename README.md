# MIMHD: multi-bit in-memory hyperdimensional inference, in SystemVerilog

Hyperdimensional computing (HDC) classifies a sample in two steps. First it
*encodes* the feature vector into a long hypervector (HV) of D elements. Then
it runs an *associative search*: it compares that query HV with one stored
class HV per class and reports the closest class. Most in-memory HDC hardware
stores one bit per element and needs D > 10,000 to be accurate. MIMHD stores
2 or 3 bits per element in multi-level FeFET cells. That reaches the same
accuracy at D = 4000 and keeps both steps inside memory arrays:

* **Encoding in FeFET crossbars.** Every feature has its own group of 64 x 64
  crossbar arrays. The group's rows hold the 64 *level HVs*. The row chosen by
  the feature's value is multiplied, column by column, with that feature's
  *base HV*. All groups share their column output lines, the *source lines*.
  The currents on each line therefore add up to the encoding sum, and one ADC
  per line turns that sum into a P-bit element of the query.
* **Search in FeFET multi-bit CAMs (MCAMs).** Each class HV sits in one MCAM
  row. A cell conducts more the further the searched value is from the stored
  one (the *MCAM distance metric*). The match-line current of a row is
  therefore the distance between the query and that class, and a sense stage
  picks the row with the lowest current.

This repository gives RTL for that datapath. The controller, the decoders,
the drivers and the storage are synthesizable logic. The analog parts are
behavioural models that compute the same function with integers: the crossbar
arrays, the source lines with their ADCs, the MCAM arrays and the sense
amplifiers. The arrays are sized as in the publication: D = 4000, 64 x 64
arrays, 64 levels, 1/2/3-bit precision, and up to 784 features.

## What one inference computes

P is the precision (1, 2 or 3 bits). An element with state s (0 .. 2^P-1)
stands for the value s+1, so elements take the values 1 .. 2^P. For a query
with features f_1 .. f_n:

```
level(f)  = floor(f * 64 / 256)                       8-bit features, 64 levels
I[c]      = sum_{i<n} (L[level(f_i)][c] + 1) * (B_i[c] + 1)      source line c
H[c]      = #{ j < 2^P-1 : I[c] >= vref[j] }           P-bit ADC code, c < D
ML[k]     = sum_{c<D} G[ | C_k[c] - H[c] | << (3-P) ]  match line of class k
class     = argmin_{k < num_classes} ML[k]             lowest index on a tie
```

Here L is the 64 x D table of level HVs, B_i is the base HV of feature i,
C_k is class HV k and `vref` are the ADC references. G is the MCAM cell
conductance against distance on the cell's 8-state grid:

| distance on the 8-state grid | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| G, units of 0.1 uS | 6 | 12 | 35 | 92 | 188 | 303 | 410 | 500 |

The shape of this table is what makes the search work. G is small near a
match, rises roughly exponentially, then saturates. A few badly mismatched
elements therefore cost a bounded amount, but many near-misses add up. These
are not measured values. They are read off a published plot of one 3-bit
cell, and they are the parameter `G_LUT` of `mcam_array` so that measured
values can be dropped in.

## Block map

```
 features[0..N-1]                       programming port (level / base / class)
      |                                              |
      v                                              v
 +-- crossbar group i (x N) ----------------------------------------+
 | level_decoder     base_hv_driver     fefet_crossbar_group        |
 | f_i -> level ->   B_i -> column      64 level rows x 63 arrays   |
 | one word line     drive levels       of 64 columns               |
 +-----------------------------------------|------------------------+
                                           | column currents (shared source lines)
                                           v
                              sl_adc_bank: sum over groups, P-bit flash ADC per line
                                           | enc_hv (query HV, D x P bits)
                                           v
                              dl_driver: place on the 8-state cell grid
                                           v
                              mcam_array: K rows x 63 arrays of 64 columns,
                                          distance-metric currents, row sums
                                           v
                              sense_amp: lowest enabled current (one-hot)
                                           v
                              class_decoder -> pred_class, pred_valid

 inference_controller sequences the phases; mimhd_top wires everything.
```

| file | kind | role |
|---|---|---|
| `rtl/mimhd_pkg.sv` | package | sizes, cell and precision types, write targets, conductance table, `to_grid` |
| `rtl/mimhd_top.sv` | logic | top level; N crossbar groups, search module, write-port routing |
| `rtl/inference_controller.sv` | logic | 6-phase sequencer, `busy`/`done`, write lock-out |
| `rtl/level_decoder.sv` | logic | "Decoder and Driver": linear quantizer plus one-hot word lines |
| `rtl/base_hv_driver.sv` | logic | stores B_i and drives the crossbar columns |
| `rtl/fefet_crossbar_group.sv` | behavioural | level-HV crossbars of one feature |
| `rtl/sl_adc_bank.sv` | behavioural | source-line sums, flash ADCs, output register |
| `rtl/dl_driver.sv` | logic | MCAM data-line driver |
| `rtl/mcam_array.sv` | behavioural | class-HV MCAM arrays and match-line sums |
| `rtl/sense_amp.sv` | behavioural | lowest-current row detection |
| `rtl/class_decoder.sv` | logic | one-hot row to class number |

The behavioural models are written in synthesizable style and compile like
the rest. They stand for analog circuits and describe what those circuits
compute, not how the circuits work.

## The encoding module

**Groups and arrays.** Group i serves feature i. It is ceil(D/64) crossbar
arrays side by side, each 64 rows by 64 columns. Row r of every array holds
columns of level HV L_(r+1), so across the group a row is one complete level
HV. D = 4000 is not a multiple of 64, so the group has 63 arrays (4032
columns). The last 32 columns are never driven and always give code 0.

**Level HVs.** Level 1 is random. Each following level copies the previous
one and redraws D/64 random elements. Level 1 and level 64 are therefore
nearly unrelated, and neighbouring levels are similar. Every group stores the
*same* 64 level HVs, because each group must be able to select any level on
its own in the same cycle. The write port can broadcast a level row to all
groups in one cycle for that reason.

**Multiplication and addition.** The decoder raises the word line of
`level(f_i)`. The base-HV driver puts B_i[c]+1 on column c. A selected cell
passes a current proportional to (stored value) x (column level). That is
the element-wise product of the encoding equation. Column c of all groups is
one wire, so the currents add by Kirchhoff's law. No partial sum is ever
written back into the arrays. In the RTL the group models sample their column
currents on `read`, and `sl_adc_bank` adds them when it samples.

**ADC references.** The ADC is modelled as a flash converter. With precision
P it uses the first 2^P-1 entries of `adc_vref` and outputs how many of them
the line current reaches. The references set the quantizer of the encoded HV,
so they belong to the trained model and are loaded with it. They must be
ascending. A workable choice is to split the spread of line currents over the
training set evenly, which is what the testbenches do. The line current lies
between n and 64n current units for n active features.

**Feature range.** Features are 8-bit unsigned values. They are quantized
linearly over their full range by keeping the top 6 bits. If the data needs
another range, scale it before the inputs.

## The associative search module

**Cell grid.** The MCAM cell has 8 states. A P-bit element is placed on that
grid by shifting it left by 3-P bits (see `mimhd_pkg::to_grid`), so 2-bit
values use states 0, 2, 4, 6 and 1-bit values use 0 and 4. Class HVs are
placed on the grid when written, using the precision in force at that time.
`dl_driver` places the query the same way. Always write class HVs in the
precision they will be searched in.

**Binary mode.** With P = 1 every cell is either a match (G[0]) or a mismatch
(G[4]). The row current is then a linear function of the Hamming distance,
which is the binary HDC search. Nothing else changes between modes: the
crossbars, ADCs and search run the same way at every precision.

**Row sums and masking.** Each 64 x 64 MCAM array sums its row, and the
sums of the same row in all 63 arrays are added. Rows at or above
`num_classes` are never picked. Unprogrammed rows may hold anything, so set
`num_classes` to the number of classes actually loaded.

**Sense stage.** `sense_amp` picks the enabled row with the lowest current.
On a tie the lower row wins, a rule of this design. `class_decoder` turns the
one-hot result into a number. `pred_valid` is low only when no row is
enabled.

## Interface and timing

Settings, which are static while busy:

| port | meaning |
|---|---|
| `prec` | precision P: 1, 2 or 3 (0 counts as 1) |
| `num_features` | n: groups at or above n raise no word line and add no current |
| `num_classes` | k: MCAM rows at or above k are not sensed |
| `adc_vref[0..6]` | ascending ADC references in current units |

**Programming port.** The port is accepted only when idle and writes one
64-element segment (`prog_data[0..63]`, 3 bits each) per cycle while
`prog_we` is high:

| `prog_tgt` | writes |
|---|---|
| `TGT_LEVEL` | level row `prog_row`, array `prog_tile` of group `prog_group`, or of all groups if `prog_bcast` |
| `TGT_BASE` | elements `64*prog_tile ..+63` of base HV B_(`prog_group`) |
| `TGT_CLASS` | class row `prog_row`, array `prog_tile` of the MCAM |

A full 3-bit model for a 784-feature dataset takes 64 x 63 broadcast level
writes, 784 x 63 base writes and k x 63 class writes.

**One inference.** Hold `features` and the settings, then pulse `start` while
`busy` is low. The phases are one clock each:

| edge after start | phase | what happens |
|---|---|---|
| 0 (start seen) | IDLE | features latched; base-HV drivers switch on |
| 1 | DRIVE | word lines up; crossbar column currents sampled |
| 2 | CONVERT | source lines summed and converted; `enc_hv` valid from here; drivers off |
| 3 | DLOAD | query applied to the data lines |
| 4 | MATCH | match-line currents sampled |
| 5 | SENSE | lowest row chosen |
| 6 | DONE | `done` high for one cycle; `pred_class`, `pred_valid` valid |

`done` therefore rises 6 clocks after the edge that accepted `start`.
`pred_class` holds until the next inference. `start` is ignored while busy,
and so is `prog_we`. An assertion flags a change of `prec` while busy.

**Encoded HV output.** `enc_hv` is an output so that training software can
read the hardware's own encoding of its training set. The publication
retrains the class HVs offline against the MCAM metric, and that retraining
needs those encoded HVs. The retraining itself is software and is not part of
this RTL.

## How far the model can be trusted, and where it departs

The following follow the publication:

* The array organisation: n groups of D/64 crossbars of 64 x 64, 64 level
  rows, MCAM arrays of 64 x 64, and one class per MCAM row.
* The data flow: decoder, base-HV driver, shared source lines, ADCs, data-line
  driver, MCAM, sense amplifier, decoder.
* The encoding equation, the level-HV construction and the element values
  1 .. 2^P.
* Adding the row currents across MCAM arrays, picking the lowest current, and
  the Hamming behaviour at 1 bit.

The following are this design's own choices, where the publication says
nothing:

* All control: the 6-phase sequence, the latency, the write port and its
  broadcast mode, the lock-out while busy, and the reset values.
* 8-bit features quantized by their top 6 bits.
* P-bit base-HV elements with drive level value+1.
* Integer current units: cell current = (state+1) x (drive level).
* A flash ADC with loadable references, one per source line.
* The "shift registers" printed next to the ADCs, built only as the register
  that holds the encoded HV. The publication does not describe them further.
  No bit-serial input and no shift-and-add are built.
* The mapping of 1- and 2-bit values onto the 3-bit cell grid.
* The conductance table values (see above), the tie rule, and row masking
  with `num_features` / `num_classes`.

The models leave out device variation, ADC non-linearity, noise and the
energy or latency of the analog parts. The publication's robustness results
(accuracy loss under random bit flips) are therefore not reproduced here.
Inject errors into `enc_hv` or the stored arrays to study them. The match-line
bias driver has no logic function and is folded into the search strobe. The
FeFET device itself appears only as a multi-level cell value.

## Sizes and datasets

The defaults (`mimhd_pkg`) are D = 4000, 64 x 64 arrays, 64 levels,
P up to 3, N = 784 feature groups and K = 64 class rows. Every dataset of the
evaluation fits:

| dataset | features n | classes k | groups used | MCAM rows used |
|---|---|---|---|---|
| MNIST | 784 | 10 | 784 / 784 | 10 / 64 |
| UCIHAR | 561 | 12 | 561 | 12 |
| ISOLET | 617 | 26 | 617 | 26 |
| PAMAP | 75 | 5 | 75 | 5 |
| FACE | 608 | 2 | 608 | 2 |
| PECAN | 312 | 3 | 312 | 3 |

D = 8000, where the 2-bit model is most accurate, needs 125 arrays per group.
Build it with `mimhd_top #(.D(8000))`. A D = 1000 model runs on the default
build if every class HV holds the same values in columns 1000 and up. Those
columns then add the same current to every match line.

At the defaults the storage is 784 x 64 x 4032 three-bit crossbar cells
(about 600 Mbit, as in the publication) plus 784 x 4032 base elements. A
behavioural simulation of that takes about 340 MB of memory.

## Simulating

Every testbench checks itself, prints `TB_RESULT checks=N failures=M` and
stops. Build with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mimhd_pkg.sv tb/tb_mimhd_top.sv --top-module tb_mimhd_top -o sim
./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_mimhd_top` | whole engine at D = 200, 12 groups, 8 rows: all three precisions, broadcast and per-group programming, groups switched off, rows masked, start and writes while busy, 6-cycle latency, every encoded element and class against a reference model |
| `tb_mimhd_full` | whole engine at the default size: a 784-feature, 10-class 3-bit model, 12 queries. It takes about 4 minutes to build and 2.5 minutes to run |
| `tb_mimhd_datasets` | the feature and class counts of all six datasets above on all 784 groups and 64 rows, 3-bit, with D cut to 128: unused groups see random features and hold stale base HVs and must add nothing. Build time is about that of `tb_mimhd_full` |
| `tb_level_decoder`, `tb_base_hv_driver`, `tb_fefet_crossbar_group`, `tb_sl_adc_bank`, `tb_dl_driver`, `tb_mcam_array`, `tb_sense_amp`, `tb_class_decoder`, `tb_inference_controller` | each block against values computed in the testbench |

The end-to-end tests build the class HVs from encoded random prototypes.
They check that each prototype is recognised as its own class, and that the
hardware matches the reference equations for perturbed queries.

## Changing it

* **Array size.** D, the array width T, the number of levels M, the number of
  groups N and the number of class rows K are parameters of `mimhd_top`, with
  defaults in `mimhd_pkg`. Current widths follow from them.
* **Cell behaviour.** Change `G_LUT` (MCAM) or the product in
  `fefet_crossbar_group` (crossbar). The reference models in
  `tb_mimhd_top.sv` and `tb_mimhd_full.sv` hold their own copy of the table.
* **Precision above 3 bits.** This needs a larger `PMAX`, and with it a
  longer conductance table.
