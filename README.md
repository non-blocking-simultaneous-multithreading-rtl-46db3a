# NB-SMT: a non-blocking multithreaded systolic array for 8-bit DNN inference

Most multiply-accumulate (MAC) operations in a quantised convolutional network
do not need a full 8-bit x 8-bit multiplier. Many activations are zero after
ReLU. Many weights are zero after pruning. Many of the remaining values fit in
4 bits. A conventional systolic array still spends one MAC unit for one cycle
on each of these operations.

Non-blocking simultaneous multithreading (NB-SMT) lets several "threads" share
one MAC unit in the same cycle. In a CPU, simultaneous multithreading resolves
a structural hazard by making one instruction wait. A systolic array cannot
wait: data moves one processing element (PE) per cycle whatever its value. NB-SMT
therefore never stalls. When threads collide on the multiplier, each gets a
narrower slice of it: their operands are reduced to 4 bits on the fly. DNNs
tolerate this occasional loss of precision. The array then finishes a layer in
1/T of the cycles with T threads, always, and the result is exact whenever
sparsity or narrow values make the collision harmless.

This repository holds synthesizable SystemVerilog for SySMT, an NB-SMT
output-stationary systolic array. The default configuration is 16 x 16 PEs
with 2 threads. A 4-thread variant is selected with one parameter.

## What the core computes

`sysmt_core` computes one output tile `O = X * W`:

* `X` is ROWS x K unsigned 8-bit activations.
* `W` is K x COLS signed 8-bit weights.
* `O` is ROWS x COLS, held in 32-bit accumulators.

The K dimension is cut into THREADS equal slices. Thread `t` of every row of X
and every column of W carries elements `t*K/T ... (t+1)*K/T - 1`. All threads
of a PE add into the **same** accumulator, because they are slices of one dot
product. This is the "shared MAC, shared partial sum" form of NB-SMT. Each PE
thus holds one 32-bit psum, not one per thread.

Each cycle, one step of every thread enters the core:

| port | shape | meaning |
|---|---|---|
| `x_i[r][t]` | ROWS x THREADS x 8 b | activation of row r, thread t |
| `w_i[c][t]` | COLS x THREADS x 8 b | weight of column c, thread t |
| `beat_i` | `{valid, first}` | this step belongs to a tile; `first` marks step 0 |
| `reduce_w_i` | 1 b | collision policy, see below |
| `psum_o[r][c]` | ROWS x COLS x 32 b | the output tile |
| `stat_o[r][c]` | ROWS x COLS x 5 b | what PE (r,c)'s controller did with its last beat |

A tile takes K/THREADS input cycles. The inputs are not skewed by the caller.
The core delays row r by r cycles and column c by c cycles internally (the
`skew_buffer` triangles), so that matching activations and weights meet in the
right PE.

**Timing.** Suppose step k is presented before rising edge n. Then
`psum_o[r][c]` includes it after edge `n + r + c + 1`. The "+1" is the PE's
second pipeline stage. Tiles may follow each other with no gap. A PE keeps the
old tile's result until the first step of the new tile reaches it; `first`
then restarts its accumulator. For a 16 x 16 core, if the last step of a tile
is sampled at edge n, the last PE (15, 15) holds the finished result after
edge n + 31.

`reduce_w_i` is static configuration. Change it only while no tile is in
flight, because it is not skewed with the data.

## Inside a PE: how threads are squeezed in

A thread is **active** in a cycle when both its activation and its weight are
nonzero. An inactive thread contributes nothing, so it gives up its share of
the multiplier. The controller looks at all threads each cycle.

### Two threads (`pe_ctrl2` + `fmul2`)

The flexible multiplier `fmul2` has two lanes. Each lane is a 5-bit x 9-bit
signed multiplier followed by an optional shift left by 4. The two lane
products are added.

| active threads | what the lanes do | error |
|---|---|---|
| 0 or 1 | lane 0: `{0, x[3:0]} * w`; lane 1: `{0, x[7:4]} * w << 4`. Together these form one full 8b x 8b product of the active thread. | none |
| 2 (collision) | lane i: `x_i` reduced to 4 bits, times `w_i`, shifted by 4 if the reduced value is a high nibble | none if both activations are below 16, or if their low nibbles are zero |

Precision reduction (`prec_reduce`) works as follows:

* If the operand's top four bits are zero, its low nibble is used as is.
* Otherwise the operand is rounded to the nearest multiple of 16, and its
  high nibble is used with a shift.

Examples: 46 becomes 3 (representing 48). 178 becomes 11 (176). 224 becomes 14
(224, exact). Values 248 to 255 would round to 256; they saturate to nibble 15
(240).

With `reduce_w_i = 1` the weights are reduced instead of the activations on a
collision. The activation then takes the 9-bit port as `{0, x}`, and the
reduced weight takes the 5-bit port, sign-extended. A signed weight counts as
4-bit when it lies in [-8, 7]. Otherwise it is rounded to a multiple of 16 and
clamped to [-128, 112]. Reducing weights is the better policy for networks
whose weights tolerate quantisation better than their activations (ResNet-50,
in the original evaluation).

### Four threads (`pe_ctrl4` + `fmul4`)

`fmul4` has four lanes. Each lane is a 5-bit x 5-bit signed multiplier, shifted
left by 0, 4 or 8 bits. Operand nibbles enter zero-extended when unsigned, and
sign-extended when they are a weight's high nibble or a reduced signed weight.

| active threads | what the lanes do |
|---|---|
| 0 or 1 | The four nibble products of one full 8b x 8b multiplication: `xL*wL + (xH*wL << 4) + (xL*wH << 4) + (xH*wH << 8)`. This is exact. |
| 2 | Same policy as two threads. The lower-numbered active thread uses lanes 0-1 and the other lanes 2-3. The reduced operand is multiplied by both nibbles of the 8-bit one. |
| 3 or 4 | Every active thread i uses lane i. Both its activation and its weight are reduced to 4 bits, and the lane shifts by 4 for each rounded high nibble. |

With three active threads, one of them could in principle keep a 4b x 8b
product. It is reduced anyway; this keeps the controller small.

### Pipeline

1. **Stage 1.** Controller, precision reduction and flexible multiplier feed a
   20-bit product register.
2. **Stage 2.** `psum <= first ? product : psum + product`, on valid beats only.

Next to the pipeline, every thread's activation and weight are registered
and passed on to the right-hand and lower neighbours. This is why a 2-thread
PE has twice the forwarding registers of a conventional PE.

## Running a layer with fewer threads

Some layers suffer more than others from precision reduction. The original
evaluation runs those with fewer threads: one thread for error-free layers,
or 2 threads on the 4-thread array. This needs no mode logic here. The feeder
splits K over fewer threads and sends zeros on the unused ones. Zero operands
make a thread inactive, so the used threads never see a collision with it:

* On the 2-thread core, one-thread operation is always exact.
* On the 4-thread core, a layer run on two threads behaves exactly like the
  2-thread PE.

The price is the lost speedup for that layer.

## Accuracy and speed

The core's speed does not depend on the data. A tile of K terms always takes
K/T input cycles plus ROWS + COLS - 1 cycles of fill and drain. The data affects only the result:

* single-thread beats are exact;
* collisions of narrow values (activations below 16, or with a zero low
  nibble) are exact;
* other collisions lose at most the low-order bits dropped by rounding.

`stat_o` reports, per PE and beat, the number of active threads, whether they
collided, and whether the reduction actually changed an operand. This allows
utilisation and error to be measured in simulation.

On synthetic data shaped like a ResNet-18 3 x 3 convolution (K = 576; half the
activations zero, most of the rest 4-bit; bell-shaped weights), the workload
testbench measures the following:

| core | input cycles | PE utilisation | gain over 1 thread | analytical gain | relative RMS error |
|---|---|---|---|---|---|
| 16 x 16, 2 threads | 288 | 0.75 | 1.49 | 1.50 | 2.5 % |
| 16 x 16, 4 threads, 40 % pruned weights | 144 | 0.76 | 2.53 | 2.53 | 5.9 % |
| 16 x 16, 2 threads, weights reduced (ResNet-50 1 x 1 tile, K = 256) | 128 | 0.75 | 1.49 | 1.50 | 8.4 % |

The analytical gain is `(1 - (1 - r)^T) / r`, where `r` is the probability
that a thread is active. It assumes independent threads; for T = 2 it reduces
to `1 + sparsity`. Reducing weights does worse on this synthetic data because its activations are
mostly 4-bit already, while its weights are wide. The choice between the two
policies depends on the real distributions of each network. The error figures come from synthetic data. They say nothing
about network accuracy, which depends on the real distributions and on the
channel order (next section).

### Channel order matters

On a 2-thread core, channel k of thread 0 always meets channel k + K/2 of
thread 1. The feeder's channel order therefore decides which values collide.
The order cannot follow the momentary activation values. It can, however,
follow statistics measured once per layer on sample inputs. Channels that
often hold 8-bit values are paired with channels that are often zero, and
narrow channels are paired with narrow ones. The weight rows are permuted the
same way, so the exact result does not change. The permutation is applied
outside the core, when the previous layer's output is written back.

`tb_workload_reorder` shows the effect on the default core. Its tile has
K = 256 channels: a quarter mostly 8-bit, a quarter 90 % zero, half 4-bit.
The order comes from statistics over a separate calibration sample. Lossy
beats (collisions where the reduction changed an operand) fall from about
7800 to about 2400 of 32768. The relative RMS error falls from 2.2 % to 1.1 %.
The cycle count is the same (128).

## Files

`rtl/`:

| file | role |
|---|---|
| `nbsmt_pkg.sv` | shared types: `act_t`, `wgt_t`, `prod_t`, `acc_t`, `beat_t` (valid/first), `ctrl_stat_t`; widths |
| `prec_reduce.sv` | the 4-bit reduction unit (the "Q" unit), parameter `SIGNED_OP` for weights |
| `fmul2.sv` | 2-lane flexible multiplier |
| `fmul4.sv` | 4-lane flexible multiplier |
| `pe_ctrl2.sv` | 2-thread precision controller |
| `pe_ctrl4.sv` | 4-thread precision controller |
| `pe.sv` | processing element; `THREADS` = 2 or 4 selects the controller/multiplier pair |
| `pe_array.sv` | ROWS x COLS grid |
| `skew_buffer.sv` | per-lane delay line, lane i delayed i cycles |
| `sysmt_core.sv` | top: two skew buffers and the array. Parameters `ROWS` = 16, `COLS` = 16, `THREADS` = 2 |

`tb/`:

| file | what it checks |
|---|---|
| `nbsmt_ref_pkg.sv` | integer reference model of the PE arithmetic, used by all testbenches |
| `tb_prec_reduce.sv` | all 256 inputs, signed and unsigned |
| `tb_fmul2.sv`, `tb_fmul4.sv` | random lane products and the 8b x 8b decomposition |
| `tb_pe_ctrl2.sv`, `tb_pe_ctrl4.sv` | product represented by the controller outputs, against the model; status flags |
| `tb_pe.sv` | 2- and 4-thread PEs, every cycle: forwarding registers and psum against a cycle model |
| `tb_pe_array.sv` | 3 x 4 grid with testbench-side skewing |
| `tb_skew_buffer.sv` | exact per-lane delay, reset |
| `core_checker.sv` | tile generator and scoreboard for the core. It checks every psum at its exact completion edge and one edge before, and requires each mechanism to occur. |
| `tb_sysmt_core.sv` | 4 x 5 2-thread and 3 x 4 4-thread cores, 24 tiles each |
| `tb_sysmt_core_full.sv` | the default 16 x 16 2-thread core, 24 tiles |
| `tb_workload_conv.sv` | the convolution tiles above, on 16 x 16 cores with 2 and 4 threads and both collision policies |
| `tb_workload_reorder.sv` | the same tile in natural and in statistically reordered channel order |

The mechanisms `core_checker` requires are: lossy reduction, error-free
collision, single-thread beats, weight reduction, back-to-back tiles, and (4
threads) 3-4-way collisions and 2-thread tiles.

Every testbench prints one line `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, from the repository root:

```sh
verilator --binary --timing --top-module tb_sysmt_core_full \
    -y rtl -y tb +libext+.sv rtl/nbsmt_pkg.sv tb/nbsmt_ref_pkg.sv \
    tb/tb_sysmt_core_full.sv
./obj_dir/Vtb_sysmt_core_full
```

Replace the testbench name to run another one. Every simulation finishes in
under a second once built. To change the array, override `ROWS`, `COLS` and
`THREADS` on `sysmt_core`; `THREADS` must be 2 or 4.

## Where this design departs from, or adds to, the original description

* **Product width.** The original PE drawing shows 16 bits from the flexible
  multiplier to the adder. Two rounded 4b x 8b products can sum to -61440,
  which needs 17 bits, so products here are 20 bits.
* **Sign extension.** The drawing's unshifted lane path is zero-extended;
  here both lanes are sign-extended, since weights are signed.
* **Accumulation adder.** The drawing puts the 32-bit accumulation adder
  inside the flexible multiplier. Here it is in the PE's second pipeline
  stage, as the two-stage pipeline description requires.
* **Weight reduction.** `fmul2`'s long port is 9 bits, not 8, so that the
  weight-reduction policy can use the same lanes. The 4-bit test and rounding
  rule for signed weights are this design's own; only the activation rule is
  given in the original.
* **Internal structure of the 4-thread parts.** The 4-thread controller is
  given only in words and the 4-thread multiplier only as an equation. Their
  internal structure here (lane assignment, four identical 5 x 5 lanes) is
  this design's own.
* **Rounding details.** Ties round up; 248-255 saturate.
* **Tile framing, readout and reset.** Tile framing (`valid`/`first`
  travelling with the activations), direct parallel readout of all psums,
  synchronous active-low reset and the skew buffers are not described in the
  original and were chosen here.
* **Collision policy.** The policy (activations or weights reduced) is one
  static input.
* **Not included.** The core stops at the array edge. Activation and weight
  storage, the offline-computed column reordering of activations, and the
  per-layer scaling of results are outside it.
* **Not implemented.** The variant that also exploits narrow weights when
  activations are reduced (swapping X and W per thread) was evaluated in the
  original but not adopted there. It is not implemented.
* **Frequency.** The original targets 500 MHz in a 45 nm library. This RTL
  has not been timed against any library.
