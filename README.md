# Batch linear-SVR accelerator for BOTDA temperature extraction

A Brillouin optical time-domain analyser (BOTDA) measures, at each point of a
sensing fibre, a Brillouin gain spectrum (BGS): the gain at every scanned pump–probe
frequency offset. A trained linear support-vector regression (SVR) model turns each
spectrum into a temperature:

    y = sum_{j<NS} beta[j] * ( sum_{i<M} SV[i][j] * x[i] ) + b

Here `x[i]` is the normalised gain at frequency `i` (M = 220 frequencies, 10.78 to
11.0 GHz in 1 MHz steps). `SV` holds the NS = 1136 support vectors, stored transposed
as an M x NS matrix. `beta[j]` is the coefficient of support vector `j`, and `b` is the
intercept. A 38.44 km fibre sampled at 250 MS/s gives 96,100 spectra per measurement.
Each spectrum needs about 250,000 multiply-accumulates, so evaluating the regression
can take longer than acquiring the data.

This RTL implements the accelerator structure published for this problem (Wu, Wang,
Choy, Shu and Lu, "BOTDA Fiber Sensor System Based on FPGA Accelerated Support Vector
Regression"). It rests on two ideas:

* **Loop interchange.** Within one spectrum, the partial sums `ps[j] = sum_i SV[i][j] x[i]`
  for different `j` do not depend on each other. So the inner loop runs over `j` rather
  than over `i`. Then F = 284 lanes can each update a different `ps[j]` every cycle, and
  no lane waits on its own accumulator.
* **Batching.** B = 40 spectra are processed together. The work becomes two matrix
  products:
  * `PS = X * SV`, a (B x M)(M x NS) product done by the *parallel MAC array*;
  * `Y = PS * beta + b`, a (B x NS)(NS x 1) product done by the *cascaded MAC array*
    and an adder tree.

  The pipeline fill of the long adder chain in the second product is then shared by 40
  vectors instead of being paid once per vector.

The default parameters are the published sizes: NS = 1136, M = 220, F = 284, B = 40.
These give NSF = NS/F = 4 tiles.

## Partitioned memories

The F lanes need F words per cycle from the support-vector memory, from the partial-sum
memory and from the coefficient memory. Each of these is therefore split cyclically into
F banks. Bank `l` holds columns `l, l+F, l+2F, ...`, that is, column `j = c*F + l`, where
`c` is the *tile* (0..NSF-1).

| memory | module | per bank | address inside bank |
| --- | --- | --- | --- |
| support vectors SV[M][NS] | `sv_matrix_mem` | M*NSF = 880 words | `i*NSF + c` |
| partial sums PS[B][NS] | `psum_ram` | B*NSF = 160 words, dual port | `k*NSF + c` |
| coefficients beta[NS] | `beta_mem` | NSF = 4 words | `c` |
| input batch X[B][M] | `x_buffer` | one bank, B*M = 8800 words | `k*M + i` |
| auxiliary matrix AM[B][NSF] | `aux_matrix` | registers, 40 x 4 words | — |

Every word is an IEEE-754 single-precision number (32 bits). Every bank is an `sdp_ram`:
one write port, and one read port whose registered output appears one cycle after the
address. If a read and a write hit the same address in the
same cycle, the read returns the old word.

## Partial-sum phase: the parallel MAC array

The controller walks `k` (vector) over `i` (frequency) over `c` (tile), with `c`
innermost. Each cycle it addresses three things:

* SV row `i`, tile `c`, in all banks;
* `x[k][i]`, which is broadcast to every lane;
* partial-sum word `k*NSF + c`.

One cycle later, every lane `l` computes
`ps <- (i == 0 ? 0 : ps) + SV[i][c*F+l] * x[k][i]` with one `fp32_mul` and one `fp32_add`,
and writes the result back to the same address. Starting from 0 when `i == 0` replaces a
separate pass that would clear the RAM. The issue rate is one per cycle, and the
write-back comes one cycle after the issue. The multiply and add are combinational inside
that cycle.

The same partial-sum word is touched again NSF cycles later. At the default sizes this is
4 cycles, after its write-back has landed. This gap, created by the loop interchange, is
also what would let a deeper, pipelined floating-point adder work here. With NSF = 1 the accesses are back to back:
the read would return the word being written in that same cycle. A one-entry bypass
register in `parallel_mac_array` then feeds the last written row back instead of the RAM
output. This bypass is needed only for NS = F builds.

## Final-sum phase: the cascaded MAC array and its address skew

This is the least obvious part. For each (k, c) pair, the array must form
`am[k][c] = sum_l ps[k][c*F+l] * beta[c*F+l]`. It does this with F multipliers feeding an
adder chain of F adders. The chain starts from 0 and has a register after every adder.
A new (k, c) group enters every cycle, so F groups are in flight at once, each at a
different depth of the chain.

Stage `l` of the chain must add lane `l`'s product exactly when the running sum of the
same group reaches it, that is, `l` cycles after stage 0. This design does not delay the
data through F(F-1)/2 skew registers. It delays the **read address** instead:

* the group's key (k, c and the partial-sum address) travels down a chain of F registers;
* `lane_key[l]` is the key issued `l` cycles earlier, and it addresses bank `l` of the
  partial-sum and coefficient memories directly;
* the data comes back one cycle later, just as stage `l` needs it.

The skew then costs F registers of key width rather than O(F^2) data registers. The price
is that the partial-sum banks need one read address per lane. In the partial-sum phase
all lanes receive the same address; in the final-sum phase each lane receives its
skewed key.

Timing: `out_sum` leaves F+1 cycles after its group was issued (one cycle of memory read,
then F adders). It goes into the auxiliary matrix at row `k`, column `c`.

## Adder tree and bias

Once the chain has drained, `adder_tree` reads one row of the auxiliary matrix per cycle,
NSF entries wide. It sums the row with a binary tree, padded to a power of two, and adds
`b` at the root. The result leaves one cycle later on `y_valid / y_k / y_data`. At the
default sizes the tree has 4 inputs and 2 levels.

## Sequencing and timing

`svr_ctrl` runs the phases in this order:

```
IDLE -> PSUM (n*M*NSF cycles) -> DRAIN1 (1) -> FSUM (n*NSF) -> DRAIN2 (F+1) -> TREE (n) -> DONE (1)
```

Here `n` is the run-time batch length `n_batch` (1..B). `done` follows the cycle in which
`start` was sampled by exactly

    n*(M*NSF + NSF + 1) + F + 3  cycles

| case | cycles | per spectrum |
| --- | --- | --- |
| full batch, n = 40 | 35,687 | 892 |
| n = 2 | 2,057 | 1,029 |
| n = 1 | 1,172 | 1,172 |
| 96,100 spectra = 2402 x 40 + 20 | 85,738,161 | 0.429 s at 200 MHz |

The per-spectrum cost tends to NS(M+1)/F = 885 cycles as `n` grows.

## Host interface

All ports are plain synchronous signals on `clk`, with an active-low asynchronous reset
`rst_n`. While `busy` is low:

1. Write each support-vector element with `sv_we`. Element `SV[i][j]` goes to
   `sv_row = i`, `sv_tile = j / F`, `sv_lane = j % F`.
2. Write each coefficient `beta[j]` the same way, with `beta_we / beta_tile / beta_lane`.
3. Write `b` with `bias_we`.
4. Write the batch with `x_we / x_k / x_i`.
5. Pulse `start` with `n_batch`.

Results stream out during the tree phase, one per cycle, in order of `k`. `done` pulses
with the last result. The model stays loaded across batches, so each batch only needs new
`x` data. Assertions in `svr_accel` flag any write while busy and any `n_batch > B`.

## Single-precision arithmetic

All data and arithmetic are IEEE-754 single precision, as in the published design.
`fp32_mul` and `fp32_add` are small combinational units written for this design.

* Both round to nearest, ties to even.
* Subnormal inputs are read as zero, and subnormal results are flushed to zero.
* Overflow gives infinity.
* NaN and infinity inputs get no special treatment.

Normalised gains, support vectors and coefficients stay far from these ranges.

The order of additions is fixed by the structure:

* each partial sum is accumulated over `i` in ascending order;
* each auxiliary entry is accumulated over the lanes of its tile, in lane order;
* the tree adds the auxiliary entries of a row pairwise, `(am0 + am1) + (am2 + am3)` at
  the defaults;
* the bias is added last.

A software reference must follow the same order to match bit for bit. The testbenches'
`fp32_ref` package does this. It computes each operation in double precision and rounds
to single once. That gives the correctly rounded result, because a double has more than
twice the precision of a single.

## Other departures from the published design

* **One cycle per floating-point operation.** Every floating-point add and multiply
  completes within one cycle, whereas the published adders take T_a > 1 cycles. The adder
  chain is therefore only F+1 cycles deep, and cycle counts are slightly below the
  published ones: about 892 vs about 935 cycles per spectrum at B = 40. Reaching 200 MHz
  would need pipelined units. The chain would then be F*T_a deep, and the drain length in
  `svr_ctrl` would grow with it.
* The published design maps both MAC arrays onto the same DSP slices. Here they are two
  separate blocks, so the multipliers are not shared.
* The following are this design's choices:
  * the host write ports;
  * the run-time batch length;
  * the address-skew alignment of the adder chain;
  * the write-back bypass;
  * the drain phases;
  * the register-based auxiliary matrix.

  The published design does not describe these, or describes them only as high-level
  synthesis directives.
* `NS` must be a multiple of `F`. Unroll factors that do not divide 1136 (such as 5, 9,
  18 or 36) would need a zero-padded support-vector matrix, which is not built.
* Not included: the optical BOTDA front end, the processor system and data movement of
  the FPGA boards, and SVR training. Training is done offline and produces `SV`, `beta`
  and `b`.

## Files

| file | content |
| --- | --- |
| `rtl/svr_pkg.sv` | default sizes, the single-precision word type, phase enum |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | single-precision multiplier and adder |
| `rtl/sdp_ram.sv` | one RAM bank |
| `rtl/sv_matrix_mem.sv`, `rtl/psum_ram.sv`, `rtl/beta_mem.sv`, `rtl/x_buffer.sv` | partitioned memories |
| `rtl/parallel_mac_array.sv` | partial-sum lanes with bypass |
| `rtl/cascaded_mac_array.sv` | multipliers, skewed key chain, adder chain |
| `rtl/aux_matrix.sv`, `rtl/adder_tree.sv` | final reduction |
| `rtl/svr_ctrl.sv` | phase sequencer |
| `rtl/svr_accel.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/fp32_ref.sv` | reference single-precision arithmetic through `real` |
| `tb/svr_accel_run.sv`, `tb/tb_svr_accel.sv` | end-to-end test at two reduced sizes |
| `tb/tb_svr_accel_full.sv` | one full batch at the default sizes |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. For
example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
          rtl/svr_pkg.sv tb/fp32_ref.sv tb/tb_svr_accel.sv \
          --top-module tb_svr_accel -Mdir obj -o sim && ./obj/sim
```

Replace the testbench and top-module names to run any other test. Expected run times:

* each unit test runs in well under a second;
* the full-size test takes about 2 minutes to build and about 10 seconds to run
  (295,000 cycles including loading).

## How far it is checked

The testbenches compare every output with values computed independently by the
`fp32_ref` package:

* each memory's bank layout and read latency;
* the partial-sum matrix built under both 1-tile and 3-tile access patterns, including
  bypass use;
* every adder-chain result and its F+1-cycle latency;
* the tree with power-of-two and padded widths;
* the controller's exact issue order and cycle count;
* the complete accelerator.

The complete accelerator is checked at two reduced sizes, NS/M/F/B = 12/6/4/3 and
4/3/4/2, each with a full batch, a one-vector batch and model reuse. It is also checked
at the full default size with a 40-vector batch. Each testbench was also run against a
deliberately broken copy of its module and detected the fault.

The floating-point units were each checked against 20,000 to 30,000 random operand pairs,
plus corner cases: ties, cancellation, overflow and underflow.

Not verified:

* results on measured BOTDA data, because no trained model is included;
* timing closure at 200 MHz on any FPGA (the units are combinational);
* NaN, infinity and subnormal handling, which is simplified by design.
