# CADC engine: a crossbar whose ADC is the dendrite

When a convolution layer is larger than one in-memory-computing crossbar, its unrolled kernel
(C_in·K1·K2 inputs by C_out outputs) is cut along the inputs into S segments, one per crossbar.
Each crossbar then delivers a *partial sum* (psum) per output channel, and these psums have to
be buffered, moved and added. At realistic crossbar sizes this traffic can cost as much energy
as the computation itself.

Crossbar-aware dendritic convolution (CADC) changes the network rather than the plumbing. Every
crossbar is treated like a dendrite of a biological neuron: its local weighted sum passes through
a nonlinearity f() before the soma adds the dendrites together,

    y[k] = sum over s of f( sum over i of w_s[i,k] * x_s[i] ),     f(v) = 0 for v <= 0.

With f = ReLU (or a sublinear, supralinear or tanh-like curve for positive v), most psums become
exactly zero. Zeros do not need to be stored or sent (a bitmask says where they were), and they
do not need to be added. The network is trained with f() in place, so this is not an
approximation of an ordinary convolution.

This RTL builds the hardware side of the idea:

* a model of the 256 x 256 SRAM macro whose column ADC *is* f(): a ramp converter built
  from extra rows of the same array, arranged so that a column whose sum is zero or negative can
  only read 0;
* a convolution engine of nine such macros (one per input segment) with a zero compressor, a
  psum buffer and a zero-skipping accumulator behind them.

The analog parts (bit cells, bit lines, sense amplifiers) are behavioural models that compute
the ideal result in integer charge units. Everything digital is synthesizable.

## Block diagram

```
               x[0][0..255]                          x[8][0..255]
                    |                                      |
          +---------v----------+                 +---------v----------+
          | cadc_macro #0      |      . . .      | cadc_macro #8      |
          |  rwl_pwm_driver    |                 |                    |
          |  ima_ramp_gen      |                 |                    |
          |  twin9t_array      |                 |                    |
          |  sense_amp_bank    |                 |                    |
          |  sa_count_reg      |                 |                    |
          |  cadc_macro_ctrl   |                 |                    |
          +---------+----------+                 +---------+----------+
                    | psum[0][0..255] (5 b)                | psum[8][0..255]
                    +------------------+-------------------+
                                       | channel scan: group k = psum[0..8][k]
                              +--------v--------+
                              | zero_compressor |  mask beat + one beat per nonzero psum
                              +--------+--------+
                              +--------v--------+
                              |  psum_buffer    |  FIFO of tagged beats
                              +--------+--------+
                              +--------v--------------+
                              | zero_skip_accumulator |  adds only the nonzero psums
                              +--------+--------------+
                                       v
                               y[k], k = 0..255
```

## The macro

### Cells and word lines

Each cell of the 256 x 256 array stores a ternary weight in a 6T core as two nodes {V_L, V_R}:

| weight | V_L | V_R | `wdata` code |
|-------:|:---:|:---:|:------------:|
| -1     | L   | H   | `2'b01`      |
|  0     | L   | L   | `2'b00`      |
| +1     | H   | L   | `2'b10`      |

Two read word lines per row carry the sign of the input: RWLP is pulsed for a positive input,
RWLN for a negative one. The cell's read path discharges either the left or the right read bit
line (RBLL, RBLR) so that the difference dV = V_RBLR - V_RBLL moves by input x weight:

| input \ weight | -1 | 0 | +1 |
|---------------:|:--:|:-:|:--:|
| -1 (RWLN)      | +1 | 0 | -1 |
|  0 (none)      |  0 | 0 |  0 |
| +1 (RWLP)      | -1 | 0 | +1 |

The magnitude of a 4-bit input is the pulse width in cycles of the 1 GHz clock (pulse-width
modulation). `rwl_pwm_driver` takes two's-complement inputs -8..7, so a pulse lasts 0 to 8
cycles. The model in `twin9t_array` counts dV in *unit discharges*, one cell conducting for one
cycle. After the compute phase, dV of column k is exactly the MAC sum_i x[i]·w[i][k]. The
analog array is linear and noise-free in this model.

### The in-memory ADC and why it clamps

Below the 256 weight rows sit 30 reference rows (word lines 256 to 285) whose cells all hold +1.
They turn every column into a ramp ADC without a separate converter:

1. **Compute phase.** While the PWM inputs run, RWLN pulses on the reference rows pull dV
   *down* by a calibration amount C. The column now holds MAC - C (V_init in the circuit's
   terms).
2. **Ramp phase.** Once per IMA period (16 cycles, i.e. 62.5 MHz) one reference row gets an
   RWLP pulse of h_k cycles, lifting dV by h_k. At the end of the period the column's sense
   amplifier fires and reports whether dV > 0. An output counter counts the 1s.

`ima_ramp_gen` gives each reference row a calibration pulse exactly as long as the ramp pulses it
will give later. So C = h_1 + ... + h_R, and after the last of the R = 2^n - 1 steps dV is back to
the MAC value. After step k, dV = MAC - (h_{k+1} + ... + h_R). The code is therefore

    code = #{ k in 1..R : MAC > h_{k+1} + ... + h_R }.

The last threshold is 0. A column whose MAC is zero or negative never sees dV > 0 and reads 0,
whatever the step heights. The clamp of f() is a property of the converter, not an extra
circuit. The other thresholds come from the step heights:

* **ReLU.** All heights equal h: code = min(ceil(MAC / h), R) for MAC > 0, else 0. For example,
  with h = 1 and a 3-bit IMA, MAC = 3 gives three 1s from the sense amplifier: code 3.
* **Nonlinear f().** The converter switches from code q-1 to q when MAC exceeds theta_q,
  with theta_1 = 0 and theta_{q+1} - theta_q = h_{R-q+1}. To realise a curve g, choose the
  thresholds theta_q = g^-1(q - 1/2) (or any rounding you prefer) and load their differences
  as heights. Example: a sublinear code ~ sqrt(MAC) at 3 bits uses theta = 0, 1, 4, 9, 16, 25, 36,
  so h_7..h_2 = 1, 3, 5, 7, 9, 11. The height of the first step never affects the code.

A height is 4 bits (0..15 cycles) so that a pulse ends inside its 16-cycle period. Curves that
need larger gaps between thresholds have to be scaled down. The step table `step_h[0..30]`
(index k-1 for step k) and the resolution `adc_bits` (1..5) are inputs, captured when an
operation starts.

A 5-bit conversion has 31 steps but there are 30 reference rows, so row 256 serves steps 1 and
31 and its calibration pulse is the sum of both (at most 30 cycles).

### Timing of one operation

| phase | length (1 GHz cycles) | what happens |
|-------|----------------------:|--------------|
| PCH   | 16                    | bit lines precharged, dV = 0 |
| COMP  | 32                    | PWM inputs (<= 8 cycles) and calibration pulses (<= 30 cycles), from the first cycle of the phase |
| RAMP  | 16 per step, R steps  | step pulse from the slot's first cycle; sense amplifiers fire in its last cycle |
| FIN   | 1                     | last count |

`done` pulses (3 + R)·16 + 2 cycles after the cycle that accepted `start`. That is 290 ns for
a 4-bit conversion (R = 15) and 546 ns at 5 bits. All 256 columns convert in parallel. The
codes stay in the output registers until the next `start`.

The circuit uses two clock domains (1 GHz for PWM, 62.5 MHz for the IMA). The RTL uses only the
1 GHz clock and treats an IMA period as a 16-cycle slot counted by `cadc_macro_ctrl`.

## The digital back end

After the nine macros finish (they run in lockstep), the engine scans the 256 output channels,
one per cycle. The nine psums of channel k form a *group*.

**Zero compression** (`zero_compressor`). A group leaves as a stream of beats: a 9-bit mask
(bit s = psum s is nonzero), then one beat per nonzero psum, lowest segment first. A group with
n nonzero psums costs 1 + n beats instead of 9. The next group is accepted in the cycle of the
previous group's last beat. Example with 8-bit psums (the module's default widths): the group
(0, 15, 0, 0, 0, 0, 0, 67, 17) becomes mask `110000010` plus 15, 67, 17. That is 33 bits
instead of 72.

**Psum buffer** (`psum_buffer`). A 64-entry FIFO of tagged beats (tag = "this is a mask") between
the compressor and the accumulator. When it is full, the compressor and with it the channel
scan stall.

**Zero-skipping accumulation** (`zero_skip_accumulator`). A mask beat tells the accumulator
how many data beats follow. It loads the first one and adds the others, one per cycle, so a
group with n nonzero psums costs n - 1 additions (2 instead of 8 in the example above:
15 + 67 + 17 = 99). An all-zero group produces y = 0 straight from its mask. The dendrite-to-soma
weights are all 1, so the soma is a plain sum. Results come out in channel order on a
valid/ready port. If they are not taken, the buffer fills and the scan stops.

In the engine, psums are 5 bits (the IMA's maximum) and y is 5 + 4 = 9 bits.

## Top-level interface (`cadc_top`)

| port | width | use |
|------|-------|-----|
| `clk`, `rst_n` | 1 | 1 GHz clock; asynchronous active-low reset |
| `w_we`, `w_seg`, `w_row`, `w_data` | 1, 4, 8, 256x2 | write one row of weights of macro `w_seg` |
| `adc_bits` | 3 | IMA resolution, 1..5 |
| `step_h` | 31 x 4 | ramp-step heights (all equal: ReLU) |
| `start` | 1 | start an operation, accepted when `busy` is low |
| `x` | 9 x 256 x 4 | signed inputs; `x[s]` goes to macro s (input segment s) |
| `busy`, `done` | 1 | operation running; pulse after the last result is taken |
| `y_valid`, `y_ready`, `y_col`, `y` | 1, 1, 8, 9 | one result per output channel |

Use: write the weights (2304 row writes for the default size). Set `adc_bits` and `step_h`.
Pulse `start` with `x` valid. Collect 256 results. Inputs and configuration are captured at
`start`, and weights persist between operations.

To map a kernel, unroll it to C_in·K1·K2 rows, split the rows into 256-row segments (zero-pad the
last one), put segment s in macro s and the matching input patch in `x[s]`. With the defaults, a
3x3 convolution with 256 input and 256 output channels maps exactly, one output pixel per
operation.

## Parameters

| parameter | default | meaning |
|-----------|--------:|---------|
| `NSEG` | 9 | macros = input segments S |
| `ROWS`, `NCOL` | 256, 256 | crossbar size |
| `REF` | 30 | IMA reference rows |
| `BUF_DEPTH` | 64 | psum buffer entries |
| `IN_BITS` (package) | 4 | input width |
| `ADC_MAX_BITS` (package) | 5 | maximum IMA resolution, psum width |
| `STEP_CYCLES` (package) | 16 | cycles per IMA period |

The crossbar sizes, reference rows, input and ADC widths and the clock ratio follow the
published macro. The number of macros, the buffer, the beat format, the single clock and the
phase lengths are this design's choices.

## What is modelled, and how it departs from the original

* **Behavioural, not circuit-level.** `twin9t_array` and `sense_amp_bank` stand in for analog
  circuits. They are ideal: no IR drop, no offset, and none of the ADC error of about 0.1 LSB mean
  and 0.56 LSB sigma seen in the circuit's SPICE simulations. The bit-line precharge has no
  module; it is the `pch` input of the array model.
* **Reference array.** The description of the circuit calls the reference block "30 x 100" cells
  in one place and numbers its word lines 256 to 285 in another. The layout gives 270 x 256 for the
  whole array. Here it is 30 rows across all 256 columns, because every column has its own IMA.
  The reference cells are fixed at +1.
* **Nonlinear mode.** The original refers to other work for how the ramp becomes nonlinear.
  Here it is a per-step height table, limited to 15 cycles per step.
* **One clock.** The digital back end was evaluated at 200 MHz in the original. Here everything
  runs on the macro's 1 GHz clock.
* **System organisation.** The original evaluates its system with a simulator and does not
  describe an engine. The nine-macro engine, the channel scan and the beat-serial compression
  format are this design's. Ordinary convolution without f() (the baseline) is not built.
* **Not built.** Clock generation and the interconnect between several engines. Layers larger
  than one operation (more than 2304 unrolled inputs or 256 output channels) need their psums
  combined outside this engine.

## Which networks fit

One operation holds a kernel of at most 9 x 256 = 2304 unrolled inputs and 256 output channels,
and the engine stores 9 x 256 x 256 = 589,824 ternary weights.

* **LeNet-5 (MNIST).** Its conv layers (25 and 150 unrolled inputs) need one macro each.
* **ResNet-18 (CIFAR-10, 4b/2b/4b).** The 64-, 128- and 256-channel 3x3 layers need 3, 5 and 9
  segments. The 512-channel layers (4608 inputs, 512 outputs) need four operations whose psums
  this engine does not combine. The network's 11 M weights must be reloaded layer by layer.
* **VGG-16 (CIFAR-100).** Same limit at 512 channels. It also uses 5-6 bit activations, more
  than the 4-bit inputs here.
* **Small SNN (DVS Gesture).** Its layer sizes are not published, so fit cannot be judged.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and ends with `$finish`, and each has a watchdog. The
reference values are computed inside the testbench from the equations above, not from the RTL.

| testbench | checks |
|-----------|--------|
| `tb_twin9t_array` | dV against a cycle-by-cycle sum of the product table, with precharge |
| `tb_rwl_pwm_driver` | pulse polarity, width = abs(x), common start, busy length |
| `tb_ima_ramp_gen` | calibration widths = sum of each row's ramp pulses; one row per step, with the right height, resolutions 1..5 |
| `tb_sense_amp_bank`, `tb_sa_count_reg` | comparator at dV = -1, 0, +1; counting and clearing |
| `tb_cadc_macro_ctrl` | phase lengths, step and sample positions, latency (3+R)·16+2 |
| `tb_cadc_macro` | codes of a 32 x 8 macro against the threshold formula and the ReLU form, clamping, saturation, nonlinear tables, 1..5 bits, latency |
| `tb_zero_compressor` | the 33-bit worked example, 1 + n beats per group, random groups under back-pressure |
| `tb_psum_buffer` | order, full/empty flags and level against a queue |
| `tb_zero_skip_accumulator` | sums, n - 1 additions per group, no stalls without back-pressure |
| `tb_cadc_top` | 3 macros of 16 x 8, end to end. It also requires clamping, saturation, all-zero, partly zero and full groups, a full buffer, a stalled result port, a nonlinear table and 1- and 5-bit conversions to occur |
| `tb_cadc_fig2` | the 64 x 3 x 3 x 64 worked example on nine 64 x 64 crossbars, with ReLU and with step tables shaped like sqrt, k x^2 and tanh |
| `tb_cadc_top_full` | one complete operation at the default size (9 x 256 x 256), all 256 outputs |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/cadc_pkg.sv tb/tb_cadc_top.sv \
          --top-module tb_cadc_top -o sim && ./obj_dir/sim
```

Verilator finds the other modules in `rtl/` through `-I`. The full-size test builds in under a
minute and runs in about a second. Registers without reset (weights, captured inputs) are
always written before they are read, so the results do not depend on random initial values.
