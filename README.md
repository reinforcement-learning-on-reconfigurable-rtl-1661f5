# A real-time policy engine for reinforcement-learned laser welding

Welding quality changes with the surface being welded: a brushed and a
sandblasted steel plate need different laser power to get the largest weld
that still stays in conduction mode (melting without drilling a vapour
keyhole). Instead of tuning the power by hand, the laser power can be set by
a learned policy that watches the process zone through two photodiodes and
improves itself from one weld line to the next by reinforcement learning
(Soft Actor-Critic, with the reflected-light signal as reward).

The learning runs on a server. What has to be fast, and what this RTL
implements, is the *acting*: every 10 ms, take the last window of photodiode
samples, run the policy network on it, draw an action from the resulting
Gaussian and put the new power on the laser's control input, in a few
microseconds and with no jitter. The design follows the FPGA controller of
Masinelli et al., "Reinforcement Learning on Reconfigurable Hardware:
Overcoming Material Variability in Laser Material Processing" (2025), which
gives the system structure, the network shape and arithmetic style, the
timing and the episode procedure. The register-level details (widths of the
memories, the lane schedule, the fixed-point formats, the register map,
the record layout) are not published and are this design's own; they are
marked as such below and in each file's header.

## The loop and who does what

```
 photodiodes (OR, OE) --> ADC --> [ this design ] --> DAC --> laser power
                                     ^      |
              weights, eps, scales   |      |  (observation, action) records
                                     |      v
                        processor + DMA  <-->  training server (SAC)
```

* **On the chip, during a weld line (an *episode*)**: acquisition, policy
  inference, action sampling, output to the DAC, recording of what was seen
  and done.
* **Off the chip, between weld lines**: the processor drains the recorded
  trajectory, the server computes rewards (the next step's reflection
  signal divided by 10 V), trains, and sends back new 8-bit weights, the
  output scale factors, and one standard-normal sample `eps` per step of
  the next episode (the chip has no Gaussian generator). The processor
  writes them into the chip and arms the next episode, telling it whether
  to act randomly (exploration, the first episodes), stochastically
  (training) or with the mean action only (test episodes).

Everything runs on one 100 MHz clock.

## One episode, cycle by cycle

An episode is `N_STEPS` = 80 steps of one acquisition window each.

1. **Armed, waiting.** After the host writes CTRL with bit 0 set, the
   controller compares each 100 kS/s sample of the reflection (OR) channel
   with `OR_THR`. Reflection rises when the laser starts hitting the
   moving plate; the first sample at or above the threshold (default 33
   codes, about 0.1 V for a +-25 V ADC range) starts the episode and
   restarts the acquisition window at that instant.
2. **Windows.** `obs_acquisition` takes one sample per channel every 1000
   cycles (100 kS/s) and averages 1000 of them: one window is exactly
   10^6 cycles, 10 ms. The means of OR and OE are the observation `s_t`.
3. **Processing overlaps acquisition.** When window `t` closes, the next
   window already accumulates while the policy runs on window `t`. From the
   end of a window to the new DAC code takes 227 cycles (2.27 us):
   1 cycle to register the observation, 1 to start the engine, 218 in the
   MLP, 7 in the action head. The published controller needs 354 cycles; any
   value below the 1000-cycle sample period keeps the action ahead of the
   next sample.
4. **Apply and record.** The new code is driven to the DAC, and the record
   {OR mean, OE mean, action before tanh, DAC code} is written to the
   trajectory FIFO. The action computed from window `t` therefore drives the
   laser during window `t+1`.
5. **Tail and done.** After the 80th action the controller keeps it on for
   one more window (the window it governs), then pulses `irq_done`, returns
   the DAC to code 0 and goes idle until armed again. Before the first
   action of an episode the DAC is also at code 0.

Code 0 is the lowest power (25 W) and 16383 the highest (100 W): the
power range spans the full control voltage. The laser's on/off keying is
not part of this design.

## The policy network and its integer arithmetic

The network is a multilayer perceptron 2 -> 32 -> 64 -> 2 with ReLU on both
hidden layers and none on the outputs. Weights and biases are 8-bit signed
integers. Activations are never requantised: each layer's results are kept
exactly, in a width that grows by the weight width plus the growth of a sum
of `n_in + 1` terms:

| quantity                  | width | why                       |
|---------------------------|-------|---------------------------|
| observation (input)       | 14    | ADC width (window mean)   |
| first hidden layer        | 24    | 14 + 8 + clog2(3)         |
| second hidden layer       | 38    | 24 + 8 + clog2(33)        |
| outputs (mu, sigma raw)   | 53    | 38 + 8 + clog2(65)        |

so no overflow is possible for any weights and inputs. Each 8-bit bias is
added at the accumulator's own integer scale. The two 53-bit outputs become
real numbers only in the action head, where they are converted to
single-precision floating point and multiplied by scale factors that the
training side's quantisation-aware model exports.

### The multiply-accumulate schedule (`policy_mlp`)

The engine has `LANES` = 16 multiply-accumulate lanes. It computes a layer
in groups of 16 output neurons; in each cycle all 16 lanes multiply the same
input activation by their own weight. A group of a layer with `n_in`
inputs takes `n_in + 3` cycles:

```
phase k = 0          read the group's bias word
phase k = 1          acc[lane] = bias[lane]            (bias word arrives)
phase k = 2..n_in+1  acc[lane] += w[lane] * x[k-2]     (weight word k-2 arrives)
phase k = n_in+2     write ReLU(acc) to the next layer's registers
```

The read address runs one phase ahead of the data because the weight
memory is a synchronous block RAM. Layer 1 is 2 groups of 5 cycles, layer 2
is 4 groups of 35, layer 3 is 1 group of 67 (14 of its 16 lanes idle):
217 cycles, plus one to start, gives `mlp_latency(16) = 218`.
`rl_pkg::mlp_latency(LANES)` gives the number for other lane counts.

### Weight memory layout

`weight_bram` is 16 byte-wide banks under one address, so that one word
holds one byte per lane. Lane `k` of the words of group `g` of layer `l`
belongs to output neuron `g*LANES + k`. With `G(l) = ceil(n_out(l)/LANES)`:

* weight of neuron `j`, input `i`, layer `l`: word
  `w_base(l) + (j / LANES) * n_in(l) + i`, lane `j % LANES`, where
  `w_base(0) = 0` and `w_base(l+1) = w_base(l) + G(l) * n_in(l)`;
* bias of neuron `j`, layer `l`: word `b_base(l) + j / LANES`, lane
  `j % LANES`, where `b_base(0) = w_base(3)` and
  `b_base(l+1) = b_base(l) + G(l)`.

With 16 lanes that is words 0-3 (layer 1), 4-131 (layer 2), 132-195
(layer 3), then 196-197, 198-201 and 202 for the biases: 203 words of 128
bits. Unused lanes (neurons 2..15 of the output layer) should be written
with 0. The functions `w_base`, `b_base` and `wmem_depth` in `rl_pkg` compute
this layout.

## From output integers to laser power (`action_head`)

```
mu    = float(acc_mu)    * MU_SCALE              float32
sigma = max(0, float(acc_sigma) * SG_SCALE)      float32
a     = mu + sigma * eps                         float32 (policy mode)
      = mu                                       (mean mode)
a_pre = round(a * 4096), saturated               Q4.12
y     = tanh(a_pre)                              Q1.14, by tanh_pwl
code  = ((y + 1) * 16383) >> 15                  0 .. 16383
```

Every float operation (`i2f`, `fmul`, `fadd` in `fp32_pkg`) rounds to
nearest even, as IEEE-754 single precision does; subnormals are read and
produced as zero, which the data here never reaches. `a_pre` is rounded
half away from zero. Q4.12 is 16-bit signed with 12 fraction bits (range
about +-8), Q1.14 has 14. Squashing and the DAC mapping are in fixed point
because tanh saturates well inside the Q4.12 range. `tanh_pwl` interpolates linearly between the 17 knots
`round(16384 * tanh(j/4))`, `j = 0..16`, uses odd symmetry, and holds
`tanh(4)` beyond |a| = 4; its error is below 0.0065. In random mode the
code is 14 bits of a 32-bit xorshift generator (shifts 13, 17, 5), giving a
uniformly distributed power, and the recorded `a_pre` is 0.

The action head is seven register stages: convert, scale, sigma*eps, add,
to fixed point, tanh, map.

## Talking to the processor

### Register port (`host_regs`)

A 32-bit word-addressed port: a write takes effect in the cycle `wr_en` is
high; a read returns `rd_data` the cycle after `rd_en`. It stands in for an
AXI4-Lite slave.

| address               | register                                                    |
|-----------------------|-------------------------------------------------------------|
| 0x000 CTRL            | write: bit 0 arms an episode, bits 2:1 mode (0 policy, 1 mean, 2 random) |
| 0x001 OR_THR          | trigger threshold in ADC codes (reset 33)                   |
| 0x002 MU_SCALE        | mean scale factor, float32 (reset 1.0)                       |
| 0x003 SG_SCALE        | sigma scale factor, float32 (reset 1.0)                      |
| 0x006 STATUS          | bit 0 active, bit 1 waiting for trigger, bit 2 FIFO full, bits 15:8 step, 31:16 FIFO count |
| 0x400 + w*4 + q       | weight word `w`, lanes 4q..4q+3 (byte `j` of the data to lane 4q+j) |
| 0x800 + t             | eps for step `t`, float32                                    |

Weights may only be written while no inference runs (an assertion checks
this); in practice the host writes them between episodes.

### Trajectory stream (`traj_fifo`)

A 128-entry FIFO, drained through a valid/ready stream in the style of
AXI4-Stream (`m_valid`, `m_ready`, 64-bit `m_data`, `m_last`):

```
m_data[63:48] OR window mean (sign-extended)   m_data[31:16] action before tanh, Q4.12
m_data[47:32] OE window mean (sign-extended)   m_data[15:0]  DAC code applied
m_last        set on the record of step 79
```

Record `t` holds the observation `s_t` and the action `a_t` computed from it;
the reward of step `t` is computed off-chip from `s_{t+1}`, the next record.

## Where this design departs from the published controller

* **Fixed point after the reparameterisation.** The output integers are
  converted to single precision and scaled as in the original; the action
  is then rounded to Q4.12 for the tanh and the DAC mapping. Subnormal
  floats are treated as zero.
* **Two scale factors**, one for the mean and one for sigma; the original
  names a single factor. Writing the same value to both gives that case.
* **Sigma is read directly** from the second output, clamped at zero. Many
  SAC implementations output log-sigma; the original does not say which.
* **Random exploration on chip.** The original draws the first episodes'
  actions uniformly at random but does not say where; here a generator on
  the chip does it.
* **Latency 227 cycles, not 354.** The schedule is this design's own; it is
  faster than the original's measured figure and far inside the budget.
* **Decimation is a plain mean** of the 1000 samples of a window, computed by
  a reciprocal multiplication (at most one LSB below the exact floor).
* **Bias alignment**, the **lane count**, the **register map**, the
  **record layout**, the **FIFO depth**, the **tail window** and the
  **idle DAC code 0** are choices where the original gives nothing.
* **Not built**: the processor system, the DMA engine, the Ethernet link and
  the training server (software or vendor IP), the ADC and DAC converters
  and their expansion-module interfaces (analog parts; the design takes and
  gives plain sample words), and the clock divider (an FPGA clocking
  primitive; the design takes the 100 MHz clock as input).

## Files

| file                      | contents                                                       |
|---------------------------|----------------------------------------------------------------|
| `rtl/rl_pkg.sv`           | sizes, widths, types (`act_mode_e`, `traj_t`), layout and latency functions |
| `rtl/fp32_pkg.sv`         | single-precision convert, multiply, add, to fixed point         |
| `rtl/rl_laser_top.sv`     | top level: wiring of all blocks, recording of each step        |
| `rtl/obs_acquisition.sv`  | 100 kS/s sampling and 10 ms window means                        |
| `rtl/episode_ctrl.sv`     | arm, trigger, step sequencing, DAC register, done interrupt    |
| `rtl/policy_mlp.sv`       | the 16-lane integer MLP engine                                  |
| `rtl/weight_bram.sv`      | banked block RAM for weights and biases                         |
| `rtl/eps_buffer.sv`       | per-step noise samples                                          |
| `rtl/action_head.sv`      | scaling, reparameterisation, random mode, DAC mapping           |
| `rtl/tanh_pwl.sv`         | piecewise-linear tanh                                           |
| `rtl/traj_fifo.sv`        | trajectory FIFO and stream                                      |
| `rtl/host_regs.sv`        | processor register port                                         |

Top-level parameters: `CLKS_PER_SAMPLE` (1000), `SAMPLES_PER_WINDOW` (1000),
`N_STEPS` (80), `LANES` (16, a multiple of 4),
`FIFO_DEPTH` (128, at least `N_STEPS`). The window must stay longer than the
processing latency; an assertion in `episode_ctrl` catches a window that ends
while the previous action is still being computed.

## Simulation

Every block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. They compare against reference models
written independently in the testbench: an exact 64-bit forward pass of the
network, the action head's single-precision arithmetic rebuilt from real
arithmetic and the bit fields of doubles, and `$tanh` in real arithmetic
(allowing for the approximation error). `tb_fp32_pkg` checks the float
helpers on their own. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rl_pkg.sv rtl/fp32_pkg.sv tb/tb_policy_mlp.sv --top-module tb_policy_mlp
./obj_dir/Vtb_policy_mlp
```

* `tb_rl_laser_top` runs the whole controller with 320-cycle windows and
  full 80-step episodes, closing the loop through a toy plant whose
  photodiode readings rise with the laser code. Four episodes: policy mode,
  mean mode after a weight reload with a stalling stream, random mode, and a
  saturating policy. Every record is checked (observation within one LSB of
  the exact mean, action bit-exact, DAC code within the tanh error), and so
  are the 227-cycle latency (at most 354), the trigger, the tail window, the
  interrupt and the return to code 0. It counts each mechanism and fails if
  one never happens. Under a second.
* `tb_rl_laser_top_full` runs one policy episode with every parameter at its
  default: one-million-cycle windows, about 81 million cycles, roughly 80
  seconds of simulation.
* The testbenches of the top level look at a few internal signals of the top
  (`win_restart`, `apply`, `waiting`, `active`) to align the reference
  model's windows with the trigger.
