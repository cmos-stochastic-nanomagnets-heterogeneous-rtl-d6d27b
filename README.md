# A p-bit sampler clocked by stochastic nanomagnets

This is the RTL of a small probabilistic computer. It samples from a Boltzmann
distribution over N binary variables ("p-bits"). Each p-bit is a digital
circuit: a weighted sum, a tanh table, a pseudo-random number generator and a
comparator. What makes the design unusual is where the randomness in *time*
comes from. The p-bits are not updated on a fixed schedule. Five stochastic
magnetic tunnel junctions (sMTJs) are the update clocks. These are magnets
that flip at random, with relaxation times of a few milliseconds. So the
update order is truly random, and the correlations that plain linear-feedback
shift registers (LFSRs) leave between neighbouring p-bits are broken up. A
host computer programs the weights over AXI4, starts the sampler and reads
back the recorded states. It uses them for inference, or for learning the
weights of a Boltzmann machine by contrastive divergence.

The synthesizable part is `pcomputer_fpga`, meant for an FPGA. `pcomputer_top`
adds behavioural models of the five analog sMTJ circuits, so the whole system
can be simulated.

## 1. What a p-bit computes

A network is given by symmetric weights `J_ij` and biases `h_i`. In the usual
bipolar form (states s = ±1), p-bit i keeps taking

    I_i = sum_j J_ij s_j + h_i
    s_i = sign( tanh(beta * I_i) - r ),     r uniform in (-1, 1)

When p-bits are updated one at a time, or only when they are not
neighbours, the network visits the state s with probability proportional to
exp(beta * (sum_{i<j} J_ij s_i s_j + sum_i h_i s_i)). This is Gibbs sampling.

**The hardware works with binary states** m = (s + 1) / 2 ∈ {0, 1}. Then the
sum needs only an AND gate per weight. The host converts the weights before
it writes them:

    J'_ij = 2 J_ij          h'_i = h_i - sum_j J_ij

With these, `sum_j J'_ij m_j + h'_i` equals the bipolar `I_i` exactly. The
testbenches that compare against Boltzmann statistics use the same
conversion. A global beta other than the built-in one (see below) is applied
by scaling J' and h'.

### Number formats

| quantity | format | range |
|---|---|---|
| J'_ij, h'_i | signed fixed point s[6][3]: 10 bits, 3 fraction bits | -64 ... +63.875 |
| local field I (sum) | 10 + ceil(log2(N+1)) bits, same scaling | no overflow for any N |
| table input | s[4][3]: 8 bits | -16 ... +15.875 |
| random number | 32-bit LFSR word, read as signed | |
| table output | signed 32-bit threshold | |

The field is clipped to the table's input range before the lookup. Because
tanh(16) is 1 to well beyond 32-bit precision, the clipping changes nothing.
It is what lets a large bias clamp a p-bit (see `tb_pcomputer_fpga`).

## 2. One p-bit in logic (`pbit`, `pbit_mac`, `tanh_lut`, `lfsr32`)

```
 m[ ] --AND mask-- J'_i,j --+
                            +--> sum + h'_i --> clip --> tanh table --> thr
                                                                        |
 LFSR (32 bit, own taps and seed) ----------------- rnd ---> rnd > thr ? --> m_i
                                                                 (on step_i)
```

* `pbit_mac` adds the weights of those neighbours that are 1. A mask, fixed
  when the design is elaborated, keeps only the edges of the chosen graph.
  Synthesis therefore removes the adders for non-edges. The sum is
  combinational.
* `tanh_lut` is a 256-word ROM. Word a holds round(-tanh(beta·a/8)·2^31),
  clipped to 32 bits. It is computed when the design is elaborated, from the
  integer parameter `BETA_MILLI` (beta × 1000, default 1000). The comparison
  `signed(rnd) > thr` is then true with probability (1 + tanh(beta·I)) / 2,
  which is the p-bit law in binary form.
* `lfsr32` is a 32-bit Fibonacci LFSR with XNOR feedback, so the all-zero
  state is legal and all-ones is the lock-up state. Every p-bit gets its own
  primitive feedback polynomial (a pentanomial, so 4 taps) and its own seed.
  The 32 polynomials in the package were found by a search for primitive
  polynomials and checked for primitivity. A 32-bit period cannot be
  simulated, so the LFSR testbench checks the period on a 5-bit instance.
  Seeds are a hash of the p-bit index and `SEED_BASE`, and never all ones.
* Timing: on a cycle with `step` high, `m` takes the new value at the clock
  edge and the LFSR advances. Without `step`, nothing changes. Latency from
  a neighbour's change to a valid field is zero cycles, because the sum is
  combinational. So two p-bits stepped on consecutive cycles see each
  other's new values.

## 3. Who updates when: the clock system

Everything runs on one system clock (75 MHz on the board described). The
"clocks" of the p-bits are one-cycle enables (`step[i]`). They come from one
of two sources, selected at run time by bit 1 of CTRL:

* **Digital clocks** (`digital_clkgen`): a counter with a programmable period
  `CLK_DIV` emits five strobes. Strobe k fires at k·CLK_DIV/5 within each
  period. CLK_DIV = 5 gives five interleaved 15 MHz clocks. CLK_DIV = 37500
  gives 2 kHz, the rate used for sampling and learning. A new period takes
  effect at once.
* **sMTJ clocks** (`smtj_edge_sync`): the five sMTJ outputs enter through a
  two-flop synchroniser. Each rising edge gives a one-cycle strobe, 2 to 3
  cycles after the pin edge. A pulse shorter than about two cycles can be
  lost. With millisecond devices this never happens.

`clock_router` distributes the five strobes to the p-bits, gated by `run`.
The mapping is the heart of correctness. Two neighbours must never be
updated in the same cycle, because each would use the other's stale value.

* **Chimera graph** (default): the graph is bipartite. Clocks 0 to 2 drive
  only p-bits of one class, and clocks 3 and 4 only the other class. In
  class 0, p-bit i uses clock (i/2) mod 3; in class 1, clock 3 + (i/2) mod 2.
  p-bits that share a clock are therefore never neighbours, so they can
  update together. In digital mode the five strobes never coincide anyway.
* **All-to-all** (`TOPO_FULL`, used for the 5-p-bit full adder): p-bit i uses
  clock i mod 5. With N ≤ 5 every p-bit has its own clock. For larger N,
  neighbours would share a clock, so an all-to-all build should keep N ≤ 5.

With sMTJ clocks, two different devices can rise in the same system cycle.
Then two neighbouring p-bits can update together. This is rare (the edges
are milliseconds apart on average, the window is 13 ns), and it is the price
of truly asynchronous clocks. The sampling statistics in the testbenches
show no measurable effect.

## 4. The graph (`pbit_network`, `pbit_pkg`)

The 32-p-bit network is a Chimera graph of 2 × 2 unit cells. Each cell is a
complete bipartite K4,4 with a "vertical" side (p-bits 8c..8c+3) and a
"horizontal" side (8c+4..8c+7). Vertical p-bit t of a cell connects to p-bit
t of the cells above and below. Horizontal p-bit t connects to p-bit t of the
cells to the left and right. That gives 80 edges and 5 neighbours per
p-bit. The two classes of the bipartition are side XOR the parity of the
cell. `adjacent()`, `chimera_class()` and `clk_of()` in `pbit_pkg` encode all
of this. The topology and N are parameters, and the MACs, the weight
registers and the clock map follow them.

## 5. Host interface (`axi4_slave`, `pcomp_regs`, `sample_capture`)

The host is an AXI4 master (32-bit data, 20-bit addresses). `axi4_slave`
accepts INCR bursts of 1 to 256 beats on both channels and turns each beat
into one register-bus access. Read data follows one cycle after the read
strobe. A write burst streams one beat per cycle, and a read burst gives one
beat every two cycles. Responses are always OKAY. Narrow, FIXED and WRAP
bursts are not supported. Assertions check the master's side of the
VALID/READY rules.

Register map (byte addresses):

| address | name | access | meaning |
|---|---|---|---|
| 0x00000 | CTRL | rw | [0] run, [1] clock source (1 = sMTJ), [2] write 1 to start a capture |
| 0x00004 | STATUS | r | [0] capture busy, [1] done, [31:16] samples stored |
| 0x00008 | CLK_DIV | rw | digital clock period, system cycles (reset 37500) |
| 0x0000C | SMP_DIV | rw | sampling period, system cycles (reset 37500) |
| 0x00010 | SMP_COUNT | rw | samples per capture, up to 16384 |
| 0x00014 | STATE | r | live m[N-1:0] |
| 0x00018 | ID | r | [7:0] N, [8] 1 = all-to-all |
| 0x40000 + 4i | h'_i | w | bits [9:0] |
| 0x80000 + 4(256i + j) | J'_ij | w | bits [9:0]; ignored unless (i, j) is an edge |
| 0xC0000 + 4k | sample k | r | state at the k-th sampling tick of the last capture |

Weights and biases are write-only, and the host writes both J'_ij and J'_ji.
This keeps the weight storage to the graph's edges (160 words for the
Chimera build). Byte strobes are honoured everywhere.

`sample_capture` has a free-running sampling tick every SMP_DIV cycles,
independent of the p-bit clocks. After a capture start, it writes the state
into the next sample-memory word on each tick, until SMP_COUNT words are
stored. Then `done` is set. The memory is 16384 × 32 bits.

A typical run looks like this:

1. Write h' with one burst, and each row of J' with one burst.
2. Write CLK_DIV if you use digital clocks, SMP_DIV, and SMP_COUNT.
3. Write CTRL = 0b011 (run with sMTJ clocks) or 0b001 (run with digital
   clocks).
4. Write CTRL with bit 2 also set, to start a capture.
5. Poll STATUS until busy clears, then read the samples in bursts.
6. When learning, compute correlations on the host, write new weights (this
   is allowed while `run` is 1), and repeat.

## 6. The sMTJ model (`smtj_pbit`)

This is a behavioural model for simulation only. It models the analog
p-bit: an sMTJ in a two-branch circuit whose output is compared with a
reference and buffered to a logic level. The output is a random telegraph
signal with exponentially distributed dwell times. The time-averaged
probability of being high is p = (1 + tanh(3.43/V · (V_in − 1.55 V))) / 2.
The mean dwell times are τ·sqrt(p/(1−p)) (high) and τ·sqrt((1−p)/p) (low).
Their geometric mean is the device's relaxation time τ. That split is the
model's assumption. In the system the devices are biased at 1.55 V (p = ½).
Their relaxation times are 2.4, 9.6, 14.4, 8.7 and 4.2 ms, the values of
five measured devices. All parameters are integers (ns, mV, 1/V × 1000).

## 7. Where this RTL departs from the original system, and what is left out

* The original design fed the sMTJ signals and phase-shifted MMCM outputs in
  as real clocks. Here there is one clock domain, with enables. This is
  simpler to time and to simulate, and it gives the same update events,
  delayed by the synchroniser.
* The original selected between sMTJ and digital clocks by rebuilding the
  FPGA. Here the source is a register bit.
* The original register bank was generated by a tool. The map above is this
  design's own. So are the depth of the sample memory, the synchroniser
  depth, the reset values, the LFSR polynomials and the seeds.
* The colouring of the Chimera graph follows the rule "p-bits sharing an
  sMTJ clock are never neighbours". It does not follow any particular
  drawing.
* Not built, because it is software or vendor IP: the host program
  (contrastive-divergence learning, KL divergence), the USB-JTAG-to-AXI
  bridge, the clocking wizard and the I/O pads. Also not built is the
  Xoshiro generator, which served only as a high-quality software baseline
  for comparison.
* What fits the default build (32-p-bit Chimera):
  * Full-adder learning with 27 hidden p-bits fits.
  * The 5-p-bit fully connected full adder needs a `TOPO_FULL`, N = 5 build.
    The same holds for the 4-p-bit update-order example and the 5-p-bit
    distribution-learning examples. The graph is a parameter, so these are
    one parameter change away, and they are simulated.
  * A 5640-p-bit Pegasus network does not fit.
  * A 650000-sample random bit stream needs about 40 captures of 16384
    samples.

## 8. Simulating it

Only Verilator (5.x) is needed. Every testbench is self-checking and ends
with a line `TB_RESULT checks=<n> failures=<n>`. Example:

    verilator --binary --timing -Irtl -Itb rtl/pbit_pkg.sv tb/tb_pcomputer_fpga.sv \
              -y rtl -y tb --top-module tb_pcomputer_fpga -Mdir obj
    ./obj/Vtb_pcomputer_fpga

| testbench | what it shows |
|---|---|
| tb_lfsr32 | the sequence matches a bit-serial reference model; the LFSR holds without `step`; a 5-bit instance has the maximal period 31 |
| tb_tanh_lut | all 256 words, for β = 1 and β = 3, against the simulator's tanh |
| tb_pbit | P(m = 1) follows (1 + tanh(βI))/2 at several fields; each decision equals rnd > thr |
| tb_pbit_mac | random weights, states and masks against a reference sum |
| tb_smtj_edge_sync | one strobe per rising edge, latency 2 to 3 cycles, none on falling edges |
| tb_digital_clkgen | period and phase of all five strobes for several dividers, including the clamp at 5 |
| tb_clock_router | source select, run gating, and the clock map for both topologies; no two Chimera neighbours share a clock |
| tb_pbit_network | a 4-p-bit network matches its Boltzmann law (KL < 0.01); on a 32-p-bit Chimera every field equals the sum over graph neighbours |
| tb_sample_capture | sample timing, count, clipping to the depth, read latency |
| tb_axi4_slave | random bursts up to 256 beats with back-pressure and byte strobes; IDs, RLAST, responses |
| tb_pcomp_regs | every register, strobes, non-edge weights ignored, read latency |
| tb_smtj_pbit | time average follows the tanh law; dwell times exponential with geometric mean τ |
| tb_pcomputer_fpga | the full adder end to end (see below) |
| tb_pcomputer_top | the default build with millisecond sMTJs (see below) |

`tb_pcomputer_fpga` runs the full adder through AXI. Its sMTJs are scaled
down to 300 ns. It checks four things:

* With digital clocks and with sMTJ clocks, KL divergence to the exact
  Boltzmann distribution of the quantised weights stays below 0.05. About
  97 % of samples are valid full-adder states at β = 2.
* Clamping A = B = 1, Cin = 0 gives S = 0, Cout = 1 in more than 95 % of
  samples.
* Weights reloaded while running take effect.
* Each of these mechanisms is counted and must have occurred.

`tb_pcomputer_top` instantiates the top with no parameter changes. It
programs random weights, runs 150 ms on the five millisecond-scale sMTJs and
captures 20 samples at 2 kHz. It reads them back in a burst and compares
them with a monitor. Every step must coincide with a rise of the right sMTJ.
It then runs 5 ms on the 2 kHz digital clocks. It takes about half a minute
in Verilator.

## 9. Changing it

* `N` and `TOPO` on `pcomputer_fpga` or `pcomputer_top` choose the network.
  For a larger Chimera, change `CHIMERA_COLS` in the package. `lfsr_taps`
  repeats its 32 polynomials beyond 32 p-bits, and the seeds still differ.
* `BETA_MILLI` sets the β built into the tanh table. The host can
  equivalently scale the weights.
* `DEPTH` sets the sample-memory depth. The STATUS count field is 16 bits.
* Weight precision is set in `pbit_pkg` (`W_WEIGHT`, `W_FRAC`, `W_LUTIN`).
  The table and the clip follow it.
