# Neural checksums: run-time error detection and correction for an in-memory-computing PE batch

Analog in-memory computing (IMC) crossbars compute matrix-vector products inside the memory
array, but their resistive cells (FeFET, RRAM) drift and suffer transient noise, so a column's
multiply-accumulate (MAC) result can come out wrong by some arbitrary amount. This RTL puts a
digital safety layer around a group ("batch") of IMC processing elements (PEs). The layer
detects such arithmetic errors at run time, locates them, and corrects them. Where it cannot
correct them, it recomputes. The scheme follows the "neural checksum" method of Parrini et al.,
*Error Detection and Correction Codes for Safe In-Memory Computations*. This is an independent
RTL rendering of it. The analog arrays themselves are represented by a behavioural model.

## The idea: checksums that ride on linearity

A crossbar column computes `O_i = sum_k In_k * w[k][i]`. Summing over columns gives

    sum_i O_i  =  sum_k In_k * (sum_i w[k][i])  =  sum_k In_k * W^ch[k]

So one extra column whose cells hold the row sums `W^ch[k]` of the protected weights returns,
in a single MAC, what the digital sum of the real columns should be. Two such codes are used,
along the two axes of the batch:

* **Crossbar checksum** (`O^Crossch_n`). Inside every PE, a redundant column holds, per row,
  the sum of that PE's weights over its columns. An adder tree sums the PE's column results to
  `O^acc_n`. The difference `Delta(n) = O^Crossch_n - O^acc_n` is non-zero when something in
  PE `n` is wrong.
* **PE checksum** (`O^PEch_b`). A redundant PE shared by the batch holds, for row `k` and
  column `b`, the sum over all PEs of `w[n][k][b]`. Adder trees sum column `b` over the PEs to
  `O^acc_b`. The difference `Delta(b) = O^PEch_b - O^acc_b` is non-zero when column `b` is
  wrong in some PE.

All PEs of a batch receive the same input vector. That is what lets one PE-checksum crossbar
cover them all. `Delta(n)` gives the row coordinate of a fault and `Delta(b)` the column
coordinate.

A **parity column** on the PE checksum guards the guard. Its cell in row `k` holds
`(sum_b W^PEch[k][b]) mod 2`. The row sum and its parity differ by an even number, so for
correct arithmetic the LSB of `O^Par` equals the LSB of `sum_b O^PEch_b`. An odd error in a
PE-checksum column or in the parity column breaks this equality.

## Bit planes and partial protection

Cells are binary. A 4-bit two's-complement weight therefore occupies four physical columns,
one per bit plane. The digital side rebuilds each weight column as

    O[b] = -8*P3[b] + 4*P2[b] + 2*P1[b] + P0[b]        (Pp = MAC of bit plane p)

Protection can be limited to the `PROT_BITS` most significant planes. This is the area versus
accuracy knob of the method: errors in low-order planes hurt a network least. The checksum
cells then hold sums of the *protected part* of the weights (the weight with its low planes
cleared), and the syndrome is built from `o_prot`, the protected-plane part of every column.
An error in an unprotected plane is neither seen nor corrected, and stays in the output.

The default is 3 of 4 bits protected, in a 12-PE batch. The source evaluates this
configuration and reports it as recovering most of the accuracy at under half the redundant
cells of triple modular redundancy.

## The detection and correction routine (IEDCR)

This is the part that needs the most care. After each inference, the controller
(`iedcr_ctrl`) takes the syndrome from `iedcr_syndrome` and decides as follows.

| Syndrome | Meaning | Action |
|---|---|---|
| every `Delta` is 0 | no error in protected planes | release outputs |
| `sum_b Delta(b) != sum_n Delta(n)` | the two codes disagree on the total error, so a checksum array is suspect | recompute the checksum arrays only (a *stall*) |
| sums equal, exactly one non-zero `Delta(b)` | faults confined to one column index `b*` (in any number of PEs) | if parity OK: `O[n][b*] += Delta(n)` for every PE `n`; else recompute checksums |
| sums equal, several `Delta(b)`, exactly one non-zero `Delta(n)` | faults confined to one PE `n*` (in any number of columns) | if parity OK: `O[n*][b] += Delta(b)` for every column `b`; else recompute checksums |
| several faulty columns in several PEs | not locatable | recompute the MAC arrays only. After `MAX_CONSEC` such recomputations in a row, recompute the checksums instead and restart the count |

Why the corrections work: with a single faulty column `b*`, each PE's `Delta(n)` is exactly
the error of its column `b*`. With a single faulty PE `n*`, each `Delta(b)` is exactly the
error of column `b` in that PE. Errors are additive, so adding the Delta undoes them. The
Delta comes from the protected planes, and an error there adds the same amount to the full
column result, so the full result is restored.

The two recompute paths exist because the errors are transient. A repeated MAC usually no
longer carries the same noise, so the routine simply tries again until the fault pattern falls
into one of the correctable cases. The forced checksum recomputation after `MAX_CONSEC` MAC
recomputations breaks the loop in which both codes carry the same wrong error and keep sending
the routine back to the MAC arrays. The parity test covers the case where such a shared error
would lead to a wrong correction.

Choices made in this RTL where the method leaves room:

* A "non-zero" Delta is what the flowchart calls "> 0", since an error can have either sign.
* When both exactly one `Delta(b)` and exactly one `Delta(n)` are non-zero, column correction
  is used. The two corrections agree in that case.
* A recomputation repeats only the arrays concerned. The other results are held.
* The method places no bound on the number of rounds. Here the routine gives up after
  `MAX_ROUNDS` recomputations (default 16), releases the uncorrected outputs, and raises
  `uncorrectable`.

## Timing and interface of the batch (`nc_batch`)

The controller runs through `IDLE -> ISSUE -> WAIT -> EVAL -> (ISSUE ...) -> DONE`.

* `start` latches `in_vec`.
* `ISSUE` pulses `mac_go` and/or `chk_go` for one cycle.
* `WAIT` waits for the requested arrays' valid pulses, which come `LAT` cycles after the go
  strobe.
* `EVAL` decides. When it finishes, it loads the corrected outputs into `out`, and `done` is
  high for one cycle after that.

One inference takes `(LAT + 2) * (1 + rounds)` cycles from the `start` edge to `done`. With the
default `LAT = 1`, that is 3 cycles when nothing is wrong and 3 more per recomputation.

Ports:

* **Programming.** `prog_en` writes row `prog_row` of the array selected by `prog_tgt`:
  * `TGT_WEIGHT`: weights of PE `prog_pe`, `prog_data[b][3:0]` per column.
  * `TGT_XCHK`: that PE's crossbar-checksum cell, `prog_data[0]`.
  * `TGT_PECHK`: the PE-checksum row, `prog_data[b]`.
  * `TGT_PARITY`: the parity cell, `prog_data[0][0]`.

  The checksum cells are computed off line, from the weights, by whoever maps the network:
  * `xchk[n][k]   = sum_b  wprot(w[n][k][b])`
  * `pech[k][b]   = sum_n  wprot(w[n][k][b])`
  * `parity[k]    = (sum_b pech[k][b]) & 1`

  Here `wprot(w) = (w >>> (4-PROT_BITS)) <<< (4-PROT_BITS)`. The testbenches show the
  computation.
* **Inference.** Inputs are `start` and `in_vec[ROWS]` (8-bit signed). Outputs are `busy`,
  `done`, and `out[N_PE][COLS]` (`DW`-bit signed).
* **Status of the last inference.**
  * Flags: `err_detected`, `corrected`, `uncorrectable`, `corr_mode_q`.
  * `rounds` counts recomputations.
  * `n_mac_recomp` counts MAC recomputations.
  * Checksum recomputations are counted by cause: `n_rechk_sum`, `n_rechk_par`,
    `n_rechk_consec`.
* **Fault injection.** `fi_main[n][b*4+p]`, `fi_xchk[n]`, `fi_pech[b]` and `fi_par` are added
  to the corresponding column results each time that array computes. They stand for the soft
  faults of the analog arrays. Tie them to zero in normal use.

## Module map

| Module | Role |
|---|---|
| `nc_pkg` | default sizes, width functions, enums (programming target, controller state, correction mode) |
| `imc_crossbar` | **behavioural model** of a resistive crossbar with ideal read-out: per-column MAC, additive fault input, `LAT`-cycle valid |
| `adder_tree` | balanced combinational adder tree |
| `pe` | bit-sliced weight crossbar, plane recombination (`o_col`, `o_prot`), adder tree (`o_acc`), crossbar-checksum column (`o_crossch`) |
| `pe_checksum` | redundant PE-checksum crossbar, parity column, parity check |
| `iedcr_syndrome` | `Delta(n)`, `Delta(b)`, their sums, counts and indices |
| `iedcr_corrector` | applies the column or PE correction |
| `iedcr_ctrl` | the routine's state machine, with assertions on its handshake |
| `nc_batch` | top: 12 PEs + PE checksum + syndrome + corrector + controller + result register |

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `N_PE` | 12 | source's highlighted configuration (it also evaluates 2, 4, 6, 8, 16) |
| `PROT_BITS` | 3 | source's highlighted configuration (it also evaluates 2 and 4) |
| `WBITS` / `IN_W` | 4 / 8 | source: 4-bit weights, 8-bit activations, both signed |
| `ROWS` x `COLS` | 64 x 16 | this design's choice; the crossbar size is not given |
| `LAT` | 1 | this design's choice (analog MAC + read-out time) |
| `MAX_CONSEC` | 2 | the source says only "a fixed number" of consecutive stalls |
| `MAX_ROUNDS` | 16 | this design's addition |
| `DW`, `CHK_W` | 27, 9 | derived, wide enough for all sums |

## How far to trust it, and where it departs from the source

* **The analog part is a model.** `imc_crossbar` computes exact integer MACs and adds
  injected errors. No ADC resolution, noise statistics or device physics are modelled. It is
  written in synthesizable style, but a real implementation replaces it with the array macro
  and its converters.
* **Checksum cells.** The checksum cells are modelled as one multi-valued signed cell per row.
  A binary-cell array would spread each checksum value over several columns. The source does
  not print that mapping. For this reason the redundant-cell percentages the source reports
  (e.g. 125 % to 225 % at 2 PEs per batch) are not reproduced by this RTL.
* **Parity column.** Its exact contents (row-sum parity) and the LSB comparison are this
  design's reading of the source's figure, which prints only the label.
* **The accelerator around the batch is not included.** That means the PE matrix, the mapping
  of convolution layers onto crossbars, and data movement. The source relies on an existing
  accelerator and a GPU simulator for its accuracy numbers.
* **The decision order, corrections, stalls and parity handling follow the source.** The
  controller's cycle timing, retry limits, programming port and status outputs are this
  design's own.

Capacity against the networks the source evaluates (CIFAR-10, 4-bit weights): one default
batch holds 12 x 64 x 16 = 12,288 weights. By common published figures, ResNet20 has about
0.27 M parameters, ResNet32 about 0.46 M, and NiN about 1 M. A network therefore needs many
batches, or reprogramming between layers, as the source's PE matrix divided into batches
implies. The RTL provides one batch. Batches are independent, so a larger array instantiates
`nc_batch` several times.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `tb_adder_tree` | random sums, N = 1, 5, 16 |
| `tb_imc_crossbar` | signed multi-bit and binary cells, fault inputs, exact `LAT` |
| `tb_pe` | plane recombination, protected part, adder tree, checksum column; protected vs. unprotected faults; independent restart of the two arrays |
| `tb_pe_checksum` | column and parity results; parity check against odd, even and no errors |
| `tb_iedcr_syndrome` | Deltas, sums, counts and indices for random error sets |
| `tb_iedcr_corrector` | all three modes, all indices |
| `tb_iedcr_ctrl` | random syndromes against a reference model of the flowchart: go strobes, final mode, flags, counters, latency; every decision must occur |
| `tb_nc_batch` | end to end at 4 PEs x 8 rows x 4 columns (see below) |
| `tb_nc_batch_full` | the same end-to-end scenarios on the default 12-PE, 64 x 16 batch |
| `tb_nc_batch_sweep` | the same scenarios on all 18 batch configurations the source evaluates (2, 4, 6, 8, 12, 16 PEs x 2, 3, 4 protected bits), 8 x 4 crossbars, via the parameterized runner `nc_batch_env` |

The end-to-end tests:

* program random weights and checksum cells computed in the testbench;
* inject faults as a function of the batch's `rounds` output, so a fault can vanish after a
  recomputation or persist;
* run directed scenarios:
  * fault-free;
  * one faulty column in two PEs;
  * one faulty PE in three columns;
  * a transient crossbar-checksum fault (sum mismatch);
  * a parity-column fault;
  * transient and persistent multi-column multi-PE faults (MAC recomputation, then the forced
    checksum recomputation);
  * an unprotected-plane fault (undetected by design);
  * a permanent fault (give-up);
* then run random single-column / single-PE faults.

Outputs are compared with a reference MAC, and latency with `(LAT + 2) * (1 + rounds)`. The
tests fail if any mechanism never occurs.

Running a test with Verilator (5.x):

    verilator --binary --timing --assert --top-module tb_nc_batch \
        rtl/nc_pkg.sv rtl/*.sv tb/tb_nc_batch.sv -o sim
    ./obj_dir/sim

For `tb_nc_batch_sweep`, add `-y tb` so that `nc_batch_env` is found. The full-size test
builds in about a minute and runs in under a second. The sweep takes a few minutes to build,
because it elaborates 18 batches. The testbenches use
`$urandom`, so change the seed with `+verilator+seed+N`. To study another configuration,
change `N_PE`, `PROT_BITS`, `ROWS` or `COLS` in the size block at the top of `tb_nc_batch`
(the directed scenarios need at least 2 PEs and 4 columns). Every expected value is derived
from those sizes.
