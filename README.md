# C-LSTM: an LSTM layer on block-circulant weights, computed with FFTs

This is synthesizable SystemVerilog for an accelerator that runs one layer of a *Google LSTM*. That
is an LSTM with peephole connections and a projection layer, as used in speech-recognition acoustic
models. It is built after the architecture of the C-LSTM paper (Wang et al., FPGA 2018).

The main idea is structured compression. Every weight matrix is made of K x K *circulant* blocks.
Each such block is fixed by a single vector of K numbers. Two things follow:

- The model shrinks by about K times, so every weight fits in on-chip memory. Nothing is fetched
  from DRAM while the layer runs.
- A circulant block times a vector is a circular convolution. It can be done with FFTs in
  O(K log K) operations instead of K².

The accelerator therefore has no dense multiplier array. Its work is done by a *circulant
convolution* unit: an FFT, an element-wise complex multiply, an accumulator and an inverse FFT.

At the default parameters the accelerator holds the Google LSTM layer the C-LSTM work evaluates:

| size | default | meaning |
|---|---|---|
| `K` | 8 | circulant block size (transform length) |
| `X_DIM` | 153 | input features per frame, padded to 160 = 20 blocks |
| `CELL` | 1024 | LSTM cells = 128 blocks |
| `PROJ` | 512 | projected outputs y_t = 64 blocks |

That is (4·1024·(160+512) + 512·1024)/8 = 409,600 weight parameters. Their spectra take 6.55 Mbit
of on-chip memory.

## The layer being computed

For every frame x_t of a sequence:

```
i_t = σ(W_i(xr)·[x_t, y_t-1] + w_ic ⊙ c_t-1 + b_i)
f_t = σ(W_f(xr)·[x_t, y_t-1] + w_fc ⊙ c_t-1 + b_f)
g_t = σ(W_c(xr)·[x_t, y_t-1]                + b_c)
o_t = σ(W_o(xr)·[x_t, y_t-1] + w_oc ⊙ c_t-1 + b_o)
c_t = f_t ⊙ c_t-1 + g_t ⊙ i_t
m_t = o_t ⊙ tanh(c_t)
y_t = W_ym · m_t
```

- The input and recurrent matrices of each gate are fused into one matrix that multiplies the
  concatenated vector [x_t, y_t-1].
- The peepholes w_ic, w_fc and w_oc are diagonal, so they are element-wise products.
- Two details follow the paper's architecture drawing rather than the textbook LSTM:
  - The output-gate peephole uses c_t-1, not c_t.
  - The candidate g_t goes through a sigmoid, not a tanh.

  See "Where this design departs or had to choose" below.

## Circulant blocks and their spectra

**Convention.** A block with defining vector w computes a[n] = Σ_m w[(n−m) mod K]·x[m]. By the
convolution theorem, a = IDFT(DFT(w) ⊙ DFT(x)).

**One inverse transform per row.** For a row block i of a block-circulant matrix,

```
a_i = IDFT( Σ_j DFT(w_ij) ⊙ DFT(x_j) )
```

The sum runs in the frequency domain, so each row needs only one inverse transform. The weight
spectra DFT(w_ij) are computed off line and stored. Only the input blocks are transformed at run
time.

**Half spectra.** The inputs and weights are real, so bin K−m is the conjugate of bin m. Only bins
0..K/2 are stored, multiplied and accumulated, and bins 0 and K/2 are real. A half spectrum
therefore fits in exactly K words. Every weight-memory line uses this packing:

```
word 0   = Re W[0]          word 1     = Re W[K/2]
word 2m  = Re W[m]          word 2m+1  = Im W[m]      m = 1 .. K/2-1
W[m] = Σ_n w[n]·exp(-j·2π·m·n/K)   (no scaling)
```

To load a trained model, compute these K numbers for every block, round them to Q4.12, and write
them through the load port (see "Loading a model").

**Where the 1/K goes.** The inverse DFT needs a factor 1/K. It is not applied at the end.
Instead, every butterfly stage of the *forward* FFT shifts right by one bit, with rounding. This
keeps the numbers entering the accumulator small, so sums over many column blocks do not
overflow. The inverse transform is built as conj → unscaled FFT → real part. Its adders saturate.

**Pipeline.** The `circ_conv` unit accepts one block per clock and returns a row 2·log2(K)+2
cycles after the row's last block:

| step | cycles |
|---|---|
| FFT of the input block | log2 K |
| complex multiply | 1 |
| accumulate | 1 |
| inverse FFT | log2 K |

The accumulator is 32 bits and saturates to 16 bits before the inverse FFT.

## Number format

- Every datapath word is 16-bit Q4.12: sign, 3 integer bits and 12 fraction bits, range [−8, 8).
- Multipliers round to nearest. Adders saturate.
- Twiddle factors are Q2.14. They come from a 17-entry quarter-wave table of cos(2πt/64), so the
  FFT can be built for any power-of-two size from 4 to 64.

## Activation curves

Sigmoid and tanh are each 22 straight segments:

- 20 equal segments across the range where the curve bends. For the sigmoid that is −5..5 in
  steps of 0.5; for tanh, −4..4 in steps of 0.4.
- One flat segment on each side, at the asymptote.

Inside the range, a segment is the chord between the true curve values at its two ends. Slope
a = (f(x1)−f(x0))/(x1−x0) and intercept b = f(x0) − a·x0, both rounded to Q4.12. The tables are
in `clstm_pkg`.

The hardware compares x with the 21 breakpoints, looks up (a, b), and computes a·x + b. That takes
one multiply and one add, with a latency of 2 cycles. Worst-case error against the true curves:

- sigmoid: 0.0067
- tanh: 0.015, which is 0.75 % of its output range

## Three stages and their buffers

```
 host ──x_t──► [x double buffer] ─┐
                                  ├─► STAGE 1  4 × circulant matrix-vector  ──► [gate double buffer]
      ┌──────► [y double buffer] ─┘      (W_i, W_f, W_c, W_o over [x_t, y_t-1])        │
      │                                                                                ▼
      │                                   STAGE 2  K LSTM cell lanes  ◄── peepholes, biases, c_t-1
      │                                                                                │
      │                                                                  [m double buffer]
      │                                                                                ▼
      └─────────────── y_t ◄──────────── STAGE 3  1 × circulant matrix-vector (W_ym)  ──► host
```

**Stage 1** (`stage1_gates`, built on `bc_matvec` with four matrices):

- It visits row block i = 0..127 and column block j = 0..83, one (i, j) pair per clock.
- It reads input block j once and shares it across four `circ_conv` units, one per gate matrix.
- Each unit reads its weight spectrum from its own memory, at line i·84 + j.
- Column blocks 0..19 come from the x buffer. Element positions 153..159 are forced to zero, so
  whatever the host wrote there is ignored.
- Column blocks 20..83 come from the y buffer. They read as zero when the frame starts a sequence.
- Each finished row block holds all four gates. It goes into the gate buffer as one word.

**Stage 2** (`stage2_cell`):

- It reads one gate block per clock and feeds K parallel `lstm_cell_lane` units.
- Each lane is a 9-stage pipeline: peephole products, bias adds, sigmoids, c_t, tanh, and the
  product m_t.
- It keeps the peephole vectors, the biases and the cell state c in on-chip memories. It reads
  c_t-1 and writes c_t block by block.

**Stage 3** (`bc_matvec` with one matrix):

- It computes y_t = W_ym·m_t over 64 row blocks × 128 column blocks.
- It writes y_t into the y double buffer and streams it out to the host.

Every double buffer (`pingpong_buf`) is one memory with two banks. The producer writes one bank
while the consumer reads the other, and a swap exchanges them.

## Steps, overlap and the recurrence

This is the part of the design that needs the most care.

**Steps.** The three stages run in *lock step*:

- A step starts every stage that has work.
- It lasts until the slowest of them reports done.
- Then every buffer that was filled is swapped.
- In one step, stage 1 takes a new frame, stage 2 the frame stage 1 finished in the previous step,
  and stage 3 the frame stage 2 finished.

So up to three frames are in flight, and one frame leaves per step. This gives the paper's
performance model: throughput is clock / max(T1, T2, T3), and the latency is three steps.

**The recurrence.** A frame that continues a sequence needs y_t-1 in stage 1 and c_t-1 in stage 2.
Both exist only once its predecessor has left stage 3 (for y) and stage 2 (for c). The paper claims
one frame per stage time but does not say how this dependency is met. This design settles it with
a flag that the host gives with each frame:

- `x_seq_start = 1`: the frame starts a new sequence, so y_t-1 = 0 and c_t-1 = 0. It enters stage
  1 at the next step, whatever is still in the pipeline. Independent sequences, or single frames,
  therefore fill all three stages.
- `x_seq_start = 0`: the frame continues the sequence of the frame committed before it. It enters
  stage 1 only when stages 2 and 3 are empty. The steps in between drain the pipeline, and
  `recur_stall` pulses at each step start that holds the frame back. Within one sequence, the
  accelerator therefore processes one frame per three steps.

The cell-state memory holds one sequence at a time, so frames must be committed in sequence order.
Interleaving two live sequences is not supported.

The step controller lives in `clstm_top`. Assertions check two rules:

- A stage is started only when idle.
- Only the stages of the current step report done.

## Timing

Cycle counts are exact and checked by the testbenches. P1 = CELL/K row blocks, Q1 = QX + QY column
blocks for stage 1, and L = log2 K.

| stage | cycles | at the defaults |
|---|---|---|
| T1 = P1·Q1 + 2L + 4 | 128·84 + 10 | 10,762 |
| T2 = P1 + 11 | 128 + 11 | 139 |
| T3 = QY·P1 + 2L + 4 | 64·128 + 10 | 8,202 |

A step lasts exactly max(T) over its active stages. At 200 MHz that gives:

- 18,584 frames per second for independent frames;
- 3 × 53.8 µs ≈ 161 µs latency per frame.

Both are about 10.5 times below the FFT8 design the paper reports: 195,313 frames/s and 15.4 µs,
which is 3 × 1024 cycles at 5 ns. The difference is parallelism. Here each gate matrix consumes one
K×K block per clock, and the paper's design uses about ten times more. Its per-operator
parallelism comes out of the authors' scheduling tool, and the paper does not print it.

## Host interface (`clstm_top`)

**Frames**

- While `x_ready` is high, write the QX blocks of the next frame with `x_we` / `x_addr` /
  `x_data`, K features per write, feature index = x_addr·K + n.
- Then pulse `x_commit`, with `x_seq_start` valid in the same cycle.
- `x_ready` falls until stage 1 takes the frame, which happens at the start of a step.

**Results**

- y_t comes out on `y_valid` / `y_addr` / `y_data`: QY beats of K values, in block order.
- `frame_done` pulses after the last block of a frame.
- Frames leave in commit order.

**Monitoring.** `step_start` pulses when a step begins. `stage_active` shows which stages work in
the current step. `recur_stall` pulses when a continuing frame is held back.

### Loading a model

`ld_we` writes one K-word line `ld_data` to memory `ld_target` at line `ld_addr`. Load the model
once after reset, before the first frame.

| ld_target | contents | line address |
|---|---|---|
| 0, 1, 2, 3 | half spectra of W_i, W_f, W_c, W_o (rows: cells, columns: [x blocks, y blocks]) | i·Q1 + j |
| 4 | half spectra of W_ym (rows: projections, columns: cells) | i·P1 + j |
| 5, 6, 7 | peepholes w_ic, w_fc, w_oc, K values of Q4.12 | cell block |
| 8, 9, 10, 11 | biases b_i, b_f, b_c, b_o | cell block |

Here i is the row block and j the column block. Column blocks 0..QX−1 of the gate matrices act on
x_t, and QX..Q1−1 act on y_t-1.

## Where this design departs or had to choose

- **Output-gate peephole on c_t-1.** The paper's equation for o_t uses c_t. Its architecture
  drawing feeds all three peepholes from c_t-1. This design follows the drawing. To follow the
  equation instead, delay the o-gate sum in `lstm_cell_lane` until c_t exists.
- **g_t through a sigmoid.** The paper writes this in both its equations and its drawing. Most
  LSTMs use tanh there.
- **Sizes 153/1024/512.** The paper does not print them. They are those of the baseline layer the
  paper compares against, and they reproduce its parameter counts: 0.41 M at K = 8 and 0.20 M at
  K = 16.
- **Input buffer.** The drawing shows one memory for [x_t, y_t-1]. Here x_t and y_t-1 sit in two
  double buffers that stage 1 reads as one vector.
- **Peepholes.** They are stored as plain vectors, not spectra. They are diagonal, so no transform
  is needed.
- **Not built:**
  - A register box drawn in the architecture figure with no described function.
  - The host link and board DRAM.
  - The software flow that trains the model, schedules the operators and generates the hardware.
- **Own choices** where the paper is silent:
  - the Q4.12 split;
  - the breakpoints of the activation segments;
  - the circulant convolution and packing conventions;
  - the step controller and the sequence-start flag;
  - the load map;
  - the processing order;
  - the parallelism.

## Files

| file | contents |
|---|---|
| `rtl/clstm_pkg.sv` | formats, saturating arithmetic, twiddles, activation tables |
| `rtl/fft_pipe.sv` | parallel radix-2 FFT, one block per clock, optional 1-bit shift per stage |
| `rtl/circ_conv.sv` | circulant convolution unit (FFT, multiply, accumulate, inverse FFT) |
| `rtl/pwl_act.sv` | piecewise-linear sigmoid / tanh |
| `rtl/lstm_cell_lane.sv` | one element of the LSTM cell |
| `rtl/sdp_ram.sv` | simple dual-port RAM (one write, one registered read) |
| `rtl/pingpong_buf.sv` | double buffer |
| `rtl/bc_matvec.sv` | block-circulant matrix-vector engine with weight memories |
| `rtl/stage1_gates.sv`, `rtl/stage2_cell.sv` | stages 1 and 2 |
| `rtl/clstm_top.sv` | the accelerator |

Verilator's lint prints a few notes that are left as they are:

- unused parameter or signal bits, such as the imaginary output of the inverse FFT and the bank
  indicators of the double buffers;
- a note that `rst_n` is used both as an asynchronous reset and in an assertion's `disable iff`.

There are no latches, loops or multiple drivers.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against double-precision
models written from the equations, not from the RTL, and ends with a `TB_RESULT checks=… failures=…`
line. The shared models are in `tb/clstm_tb_pkg.sv`:

- Q4.12 conversion;
- a deterministic hash that generates random data;
- the packed half spectrum;
- the piecewise-linear curves.

| testbench | what it checks |
|---|---|
| `tb_fft_pipe` | FFT against a direct DFT, both scalings, random blocks one per clock, within 4 LSB, latency |
| `tb_circ_conv` | groups of blocks back to back against direct circular convolution, latency |
| `tb_pwl_act` | both curves over the whole Q4.12 input range and at every breakpoint, within 1 % of the output range of the true curves, latency, saturation |
| `tb_lstm_cell_lane` | random operands against the cell equations with the true curves (tolerance 0.03), latency 9 |
| `tb_sdp_ram`, `tb_pingpong_buf` | memory and bank behaviour |
| `tb_bc_matvec` | two 24×40 matrices against the product from their defining vectors, write addresses, pass length |
| `tb_stage1_gates` | masking of padded inputs, y_t-1 = 0 at a sequence start, pass length |
| `tb_stage2_cell` | cell outputs, carry of c across frames, reset at sequence start, pass length |
| `tb_clstm_top` | end to end at 20 inputs, 32 cells, 16 projections (see below) |
| `tb_clstm_k16` | the same with K = 16 |
| `tb_clstm_full` | the same at the default sizes (K = 8, 153/1024/512), with no parameter overrides |

The end-to-end testbenches load a random model through the load port. They then feed eight frames
with sequence-start flags 1 0 0 1 1 1 0 1, and check:

- every y_t value, against the reference layer, within 0.05. The largest error at full size is
  0.017.
- the length of every step;
- that each mechanism happened at least once: recurrence stalls, steps with all three stages
  busy, drain steps, sequence starts, continuing frames, and back-pressure on the host.

The full-size run loads about 52,000 model lines and runs 16 steps. Once built, it simulates in
about a second. Building it takes Verilator a few minutes.

To run a testbench with plain Verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -j 8 -y rtl -y tb --top-module tb_clstm_top \
          rtl/clstm_pkg.sv tb/clstm_tb_pkg.sv tb/tb_clstm_top.sv
./obj_dir/Vtb_clstm_top
```

Replace `tb_clstm_top` with any other testbench name. The code does not depend on x or z values,
and the testbenches initialise everything they read.
