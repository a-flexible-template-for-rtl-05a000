# SoftEx: softmax and GELU for a BF16 Transformer cluster

Transformer inference spends a large share of its time outside the matrix
multiplications, in two non-linear functions:

- the **softmax** that turns every row of attention scores into probabilities;
- the **GELU** activation of the feed-forward layers.

On a small cluster of RISC-V cores with a matrix engine, these functions run in
software and soon dominate the runtime. SoftEx is a small accelerator for both.
It sits next to the cores and the matrix engine and shares their scratchpad
memory. It works in BFloat16 (BF16) and is built around three ideas:

1. **A cheap but accurate exponential (`expp`).** The input is turned into a
   power of two with Schraudolph's bit trick. The mantissa this produces is then
   corrected by a two-piece quadratic. The mean relative error falls to about
   0.3%.
2. **Softmax with one pass over the scores for the denominator.** The running
   maximum and the running sum of exponentials are kept together. When the
   maximum grows, the partial sum is rescaled by `exp(old_max - new_max)`. The
   same floating-point fused multiply-add (FMA) that accumulates the sum does
   the rescaling. A second pass normalises the scores.
3. **GELU from a sum of exponentials.** The Gaussian CDF is approximated as
   `Phi(x) ~ 1 - sum_i a_i exp(-b_i x^2)` for x >= 0, and mirrored for x < 0.
   SoftEx computes the sum. The cores square the input before and apply
   `x*(1-s)` or `x*s` after.

This repository holds synthesizable SystemVerilog for:

- SoftEx itself, a 16-lane BF16 datapath with its streamer and controller;
- the memory side of the cluster that hosts it: 256 KiB of word-interleaved
  banks, the interconnect, and the arbiter that shares one wide port between
  SoftEx and the matrix engine.

The cores, the matrix engine, the DMA engine and the instruction cache are not
included. Their data ports are ports of the top module `softex_cluster`.

## 1. The exponential unit (`expu`, `expp_corr`)

A BF16 value `x` is `(-1)^s * 1.m * 2^(e-127)`. Schraudolph's method computes
`2^(x/ln2)` by building the integer `round(x/ln2 * 2^7) + 127*2^7` and reading
it as a BF16 bit pattern:

- the integer part of `x/ln2` lands in the exponent field;
- the fractional part `f` lands in the mantissa field.

That gives `2^int * (1 + f)` instead of `2^int * 2^f`, which is up to 6% wrong.

In hardware:

1. The 8-bit signed mantissa `1.m` is multiplied by `1/ln2`. This constant is
   held with 14 fractional bits (`23637`).
2. The product is shifted by the unbiased exponent so that 7 fractional bits
   remain. The shift is arithmetic, so it floors.
3. The bias `127 << 7` is added.
4. Results above the BF16 range saturate to +inf. Results below the smallest
   normal number flush to zero.

`expp_corr` then replaces the 7 mantissa bits `f` with `P(f)`, a piecewise
quadratic that approximates `2^f - 1`:

```
f < 1/2 :  P = alpha * f * (f + gamma1)
f >= 1/2:  P = not( beta * not(f) * (f + gamma2) )      (not = one's complement)
alpha = 7/32, beta = 7/16, gamma1 = 211/64, gamma2 = 139/64
```

The circuit uses:

- one adder and two small multipliers;
- three 2-way multiplexers that select the operands by the top bit of `f`;
- a final conditional inversion.

Products are kept at full width and truncated to 7 bits only at the end.

The testbench sweeps every BF16 input with a result inside the normal range. The
measured error against `exp` is:

- 0.28% mean relative error;
- 1.14% worst case.

The published figures are lower: 0.14% mean and 0.78% worst case, on 10^8
uniform samples in [-88.7, 88.7]. Part of the gap comes from truncating `P` to
7 bits. Rounding that last step instead gives 0.24% and 0.84%, but the
correction circuit as published shows no rounding adder, so the RTL truncates.

One inconsistency is resolved here. alpha and beta are described as 4-bit
integers with a 2^-4 scale, but the value 0.21875 = 7/32 needs a 2^-5 scale. The
RTL uses the numeric values: 7 at 2^-5 for alpha and 7 at 2^-4 for beta.

## 2. The floating-point arithmetic (`fp_fma`)

All floating-point operations use one generic combinational FMA,
`y = a*b + c`, whose exponent and mantissa widths are parameters. It is used as:

- the FP32 FMA of the denominator accumulator;
- the BF16 adder (`b = 1`) and multiplier (`c = 0`) of each lane.

It rounds once, to nearest with ties to even. It does not model subnormals: they
read as zero and flush to zero. It does not model NaN either: infinities
propagate. Pipeline registers are added by the blocks that use it.

## 3. Softmax

A softmax job goes through three steps:

1. **accumulation**: the maximum and the denominator;
2. **inversion**: the reciprocal of the denominator;
3. **normalisation**: the outputs.

### 3.1 Accumulation with rescaling (`max_unit`, `add_tree`, `den_acc`)

One 16-element vector enters per cycle.

**Maximum.** The max unit compares the vector's valid lanes with the current
maximum. It produces:

- `new_max`;
- an update flag;
- `diff = curr_max - new_max` (a BF16 subtraction).

It never flags the first vector of a job.

**Exponentials and their sum.** Every lane's MAU (multiply-add unit) computes
`x - new_max` and its EXPU computes `expp` of that. The FP32 adder tree sums the
valid lanes.

**The denominator accumulator.** This is the subtle part, and it is in
`den_acc`. Its queue entries hold the FP32 tree sum and the optional rescale
factor. The factor `expp(diff)` is computed by `den_acc`'s own EXPU before the
entry enters the queue, a 2-deep FIFO.

The FMA is followed by a ring of P = 3 registers (`FMA_STAGES`). So three
partial sums circulate and each passes the FMA every third cycle. Every partial
sum carries a tag: the maximum epoch it was last scaled to. Each cycle, the slot
leaving the ring is handled in one of three ways:

- **rescaled** (`slot * factor`), if its tag is older than the current epoch;
- **added** to the queue head (`slot * 1 + addend`), which pops the queue;
- **passed on** unchanged.

A queue head that carries a new factor bumps the current epoch. The head then
waits until all three slots have gone round and been rescaled. Meanwhile the
queue fills and its ready signal drops. That is the input stall: the whole
datapath stops through its ready/valid handshakes. So a strictly increasing
input costs up to 3 stall cycles per vector, and a random one rarely more than a
few in total.

When the controller signals `finish`, the three slots are summed (three cycles)
into the final denominator.

### 3.2 Inversion

For a denominator `(1+M) * 2^(E-127)`:

- the reciprocal's exponent is exactly `2*127 - 1 - E`;
- its mantissa is estimated as `not(M)^2 / 2`, the parabola `(1-M)^2/2`.

The FMA then runs two Newton steps, `t = 2 - d*y` and `y = y*t`, each as two FMA
operations. That takes 4 cycles.

The seed is up to 25% low, for a mantissa near 1.0. The two steps take this to
at most 0.4%. That is at the level of the BF16 rounding the reciprocal gets
before use.

### 3.3 Normalisation

The source reads the scores again. Each lane recomputes `expp(x - max)` and
multiplies it by the BF16 reciprocal with its MAU multiplier. The results go to
an output FIFO and through the streamer's sink to memory.

## 4. The sum of exponentials for GELU (`lane_acc`, `weight_buf`)

The weights are loaded first. The two BF16 weight vectors are each at most
16 values: `a` (at `A_ADDR`) and `b` (at `B_ADDR`), with `N_w` terms (`NW`).
`b` is stored negated, so the hardware computes
`sum_i a_i * expp(b_i * x)` on an input that already holds `x^2`. They are the
first two beats of the input stream, and they fill the A and B buffers.

Then each input vector is held in the MAU registers for `N_w` cycles. In cycle
`i`:

1. every lane multiplies `x` by `b_i`;
2. the EXPU takes `expp` of that;
3. on the next cycle, the lane accumulator multiplies the result by `a_i`.

**The lane accumulator.** It converts the product to a 14-bit unsigned fixed-point
number (LSB 2^-14, truncation) and adds it with saturation. After the last term,
the sums are converted back to BF16 (truncation) and pushed to the output FIFO.
The output rate is therefore 16/N_w elements per cycle.

Fixed point is accurate here because `sum a_i <= 1/2`. The value stays inside
[0, 1) and a 14-bit integer adder is much cheaper than a floating-point one.

**Ping-pong weight order.** The weight buffers step forward through the weights
for one vector and backward for the next (`0..N_w-1, N_w-1..0, ...`). This
avoids a reset bubble between vectors. Fixed-point addition is exact, so the
order does not change the result.

## 5. Lane, datapath and pipeline (`softex_lane`, `softex_datapath`)

A lane is one MAU, one EXPU, the EXPU output register and one lane accumulator.
The datapath has 16 lanes (`N`) and two register stages with ready/valid
handshakes between them:

- **S1** is the MAU input register. The max unit and the MAU subtraction or
  multiplication, followed by the EXPU, are combinational from S1.
- **S2** is the EXPU output register. Depending on the phase, S2 feeds:
  - the adder tree and the denominator accumulator;
  - the MAU multiplier (normalisation);
  - the lane accumulators (sum of exponentials).

A stall anywhere propagates backwards, with no extra control: a full output
FIFO, a rescaling accumulator, or a memory port that loses arbitration.

The measured rates with 16 lanes and a free memory port, from the testbenches:

| Operation | Cycles |
|---|---|
| softmax accumulation | 1 vector/cycle, plus up to 3 cycles per rescale |
| softmax normalisation | 2 cycles/vector (read and write share the one memory port) |
| softmax, L elements | about `3*ceil(L/16) + 17`, e.g. 41 cycles for 128, 401 for 2048 |
| sum of exponentials, N_w = 4 | 4 cycles/vector, e.g. 4111 cycles for 16384 elements |

## 6. Memory traffic and programming (`softex_streamer`, `softex_ctrl`)

### 6.1 The streamer

The streamer owns one memory port of 16 x 16 = 256 bits with a request/grant
protocol. Read data returns one cycle after the grant. The streamer has three
parts:

- **The source** reads `ceil(len/16)` aligned beats. It gives the last beat a
  lane mask and only issues a read if its FIFO has room for every outstanding
  response.
- **The sink** writes the output beats, with byte enables taken from the mask.
- **A multiplexer** alternates between source and sink whenever both want the
  port.

### 6.2 The controller

The controller holds a register file reached through a 32-bit request/grant
target. Writes are accepted while idle. Reads return one cycle later.

| offset | register | meaning |
|---|---|---|
| 0x00 | TRIGGER | write: start a job |
| 0x04 | STATUS | bit 0: busy |
| 0x08 | IN_ADDR | byte address of the input (beat-aligned, 32 B) |
| 0x0C | OUT_ADDR | byte address of the output |
| 0x10 | LEN | number of elements |
| 0x14 | MODE | 0: softmax, 1: sum of exponentials |
| 0x18 | A_ADDR | address of the `a` weights |
| 0x1C | B_ADDR | address of the (negated) `b` weights |
| 0x20 | NW | number of terms, 1..16 |
| 0x24 | CYCLES | length of the last job in cycles |

A softmax job runs as follows:

1. read pass;
2. wait until the datapath is empty;
3. `finish` to the denominator accumulator, then wait for the reciprocal;
4. read and write pass.

A sum-of-exponentials job:

1. read the `a` beat;
2. read the `b` beat;
3. read and write pass.

At the end `evt_done` pulses for one cycle.

## 7. The cluster memory (`tcdm_bank`, `tcdm_xbar`, `tcdm_arbiter`, `softex_cluster`)

**Banks.** The tightly-coupled data memory has 32 banks of 2048 x 32 bit
(256 KiB). Addresses are word-interleaved: bank = address bits [6:2]. Each bank
is a single-port array with a one-cycle read.

**The interconnect (`tcdm_xbar`)** connects 12 narrow 32-bit initiators and one
wide port of 16 words:

- the 12 narrow initiators are 8 cores plus the DMA's two 64-bit ports, each
  split into two words;
- each bank serves one request per cycle, with round robin among the narrow
  initiators;
- the wide port is granted all-or-nothing, so the accelerator sees one grant per
  beat;
- after every cycle in which the wide port and a narrow initiator collided,
  priority between the two sides flips, so neither starves.

**The arbiter (`tcdm_arbiter`)** shares the wide port between the matrix engine
(16 words) and SoftEx (8 words, only its low words marked valid). It alternates
on contested cycles.

The top, `softex_cluster`, wires SoftEx, the arbiter, the interconnect and the
banks. It exposes the core, DMA, matrix-engine and SoftEx control ports.

## 8. How far this follows the published design

**Taken from the published description:**

- the `expp` algorithm and its constants, including the correction circuit's
  structure;
- the three-step softmax;
- the online maximum and denominator with tags, a stall through the queue, and
  rescaling on the accumulator's own FMA;
- the reciprocal seed and the two Newton steps;
- the sum-of-exponentials GELU;
- the 14-bit lane accumulators and the N/N_w output rate;
- the ping-pong weight order;
- the lane composition (MAU, EXPU, accumulator), the max unit, the FP32 adder
  tree;
- the streamer with a source, a sink and a multiplexer;
- 16 lanes, 256-bit port, 32 banks and 256 KiB of memory, 8 cores, the shared
  wide port.

**Choices made here, because the description does not fix them:**

- all pipeline depths (two datapath stages, an FMA ring of 3) and FIFO depths;
- the register map and the job sequence;
- sending the weights through the input stream;
- the request/grant protocols;
- the arbitration policies;
- rounding: round to nearest even in the FMA, truncation in the conversions
  between fixed point and floating point and in `P`;
- the fixed-point format (unsigned, LSB 2^-14, saturating).

**Known differences and limits:**

- The FMA is combinational, followed by the ring registers, rather than a
  pipelined FMA. Timing closure at the published clock would need the
  multiplication spread over the stages.
- Subnormal numbers flush to zero. NaN is not generated.
- The normalisation pass shares one memory port between reads and writes, at
  2 cycles per vector. A design with separate read and write bandwidth would
  reach 1 vector per cycle.
- The minimax-optimised GELU weights are not given numerically. The workload
  test uses the rectangle-rule weights `a_i = 1/8`, `b_i = 1/(2 sin^2(i*pi/8))`.
  These are loose, with errors up to 0.04 on GELU. Better weights can be written
  to memory without changing the hardware.
- Softmax rows longer than the memory, and tensors like ViT-base's
  197 x 3072 GELU input (2.3 MiB with its output), must be tiled by software.
- Not built: the cores, the matrix engine, the DMA engine, the instruction
  cache, and the peripheral interconnect. SoftEx's control target is a top-level
  port instead.

## 9. Simulation

Every block has a self-checking testbench in `tb/`. Each compares against
real-number reference models, has a watchdog, and ends with a line
`TB_RESULT checks=<n> failures=<n>`.

The package `tb/tb_bf16_pkg.sv` holds the BF16 and real conversions. List it,
after `rtl/softex_pkg.sv`, before the testbench:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/softex_pkg.sv tb/tb_bf16_pkg.sv tb/tb_softex_cluster.sv \
    --top tb_softex_cluster -o sim && ./obj_dir/sim
```

The testbenches and what they cover:

| testbench | block | what it covers |
|---|---|---|
| `tb_expu` | expu | every normal BF16 input; mean and max error |
| `tb_mau` | mau | subtract, the two multiply modes, rounding |
| `tb_lane_acc` | lane_acc | fixed-point sums, restart, hold |
| `tb_max_unit` | max_unit | running max with lane masks, update flag, diff |
| `tb_add_tree` | add_tree | masked FP32 sums |
| `tb_den_acc` | den_acc | rescaled sums, reciprocal, stall, latency |
| `tb_weight_buf` | weight_buf | ping-pong order, last flag |
| `tb_stream_fifo` | stream_fifo | order, occupancy, throughput |
| `tb_streamer` | softex_streamer | reads and writes under random grants, 1 beat/cycle |
| `tb_softex_ctrl` | softex_ctrl | registers, command sequences, CYCLES |
| `tb_softex_lane` | softex_lane | both modes, register timing |
| `tb_softex_datapath` | softex_datapath | softmax and sum of exponentials, rates |
| `tb_softex` | softex | complete jobs against a memory model, cycle counts |
| `tb_tcdm_bank`, `tb_tcdm_xbar`, `tb_tcdm_arbiter` | memory system | data, exclusivity, fairness, rate |
| `tb_softex_cluster` | softex_cluster | full size; softmax and GELU jobs with background traffic; counts rescales, stalls, bank conflicts, arbiter contention and both modes, and fails if any never happens |
| `tb_softex_workloads` | softex_cluster | softmax rows of 128, 197, 512, 1024, 2048; GELU on 2^14 elements; cycle counts |

`tb_softex_cluster` and `tb_softex_workloads` run the top with its default
parameters.
