# A digital control unit for a time-multiplexed photonic p-bit computer

A probabilistic computer works with *p-bits*: binary units that flip at
random between -1 and +1, with a probability of +1 that depends on an
input. A network of p-bits whose inputs depend on each other's states
samples from a Boltzmann distribution, and choosing the couplings well
turns this sampling into optimisation or inference. Written with the
inverse temperature beta, the couplings W and the biases h, each p-bit i
follows

    I_i = h_i + sum_j W_ij m_j
    m_i = sgn( tanh(beta * I_i) - r ),   r uniform in (-1, 1)

so that P(m_i = +1) = (1 + tanh(beta * I_i)) / 2.

The architecture this RTL belongs to, described in *Self-correcting
High-speed Opto-electronic Probabilistic Computer* (Aboushelbaya et al.),
takes its randomness from quantum optics. Each physical p-bit is a light
source, a beamsplitter and a pair of balanced photodetectors. Two analog
signals are formed from the detector currents:

* the **difference**, which carries the quantum randomness and is
  digitised to an 8-bit sample j;
* the **sum**, which measures how much light reached the beamsplitter.
  It gives a lower bound on the photon number and so tells whether the
  difference sample has the calibrated distribution. This is the
  "certification" that makes the source self-checking (and, in this
  design, self-correcting: uncertified samples are simply not used).

The photonic source runs far faster than digital logic can consume
samples. The control unit therefore time-multiplexes each physical p-bit
over many *logical* p-bits, whose states live in memory. In the
configuration reproduced here, 4 physical p-bits serve 64000 logical
p-bits. This repository holds that control unit. The optics, detectors,
amplifiers and ADCs are outside it, and its inputs are their digitised
samples.

## How a sample becomes a p-bit state

The bias is applied in the digital domain. A sample j turns into a state
through a threshold c:

    m = +1 if j <= c,   m = -1 if j > c

The probability of +1 is therefore F(c), the cumulative distribution of
the samples. Moving c across the 8-bit range traces a sigmoid from
always -1 to always +1. To implement the tanh rule exactly, the unit
needs, for every input value x = beta*I, the threshold c(x) with

    F(c(x)) = (1 + tanh(x)) / 2,   i.e.   c(x) = F^-1((1 + tanh(x)) / 2)

This depends on the measured sample distribution of each physical p-bit.
The unit keeps it as a programmable 256-entry table per physical p-bit
(`bias_lut`). The host fills the table from a calibration. Thresholds are
9-bit signed: c = -1 gives a p-bit that is always -1, and c = 255 one
that is always +1. The testbenches show the formula at work
(`tb/pbit_tb_pkg.sv`, `threshold_for`). They compute the exact
distribution of their behavioural source and, for each x, pick the c
whose F(c) is closest to (1 + tanh(x/16))/2.

Because c is an integer, the achievable probabilities are the values
F(c), which are discrete. Near the centre of the distribution one step of
c moves P(+1) by about 1.2 %. At full size the measured activation curve
stays within 0.015 RMS (0.06 at worst) of the ideal tanh.

## Data path

```
 physical p-bit l (x LANES)                     pbit_ctrl_top
 ---------------------------    +--------------------------------------------------------+
 difference ADC  adc_diff[l] -->| sdi_certifier l --certified j--> pbit_lane l            |
 sum ADC         adc_sum[l]  -->|  (sum >= n_min ?)                 | neighbour table      |
                 adc_valid[l]-->|  accept/reject counters           | bias table h         |
                                |                                   | bias_lut (x -> c)    |
                                |                                   | pbit_threshold       |
                                |                     read m_j <--+ |  write m_i           |
                                |                                 | v                      |
                                |                        state_mem (one bit per logical    |
                                |                        p-bit, LANES read + write ports,  |
                                |                        host port)                        |
 host_req / host_rdata  <------>| registers: beta, n_min, sweeps, start, status, counters  |
                                +--------------------------------------------------------+
```

Each lane owns a contiguous block of N_PBITS/LANES logical p-bits. Lane l
updates global indices l*N_LOCAL ... (l+1)*N_LOCAL-1. Neighbour entries may
point anywhere in the state memory, so p-bits on different lanes can be
coupled.

## One logical p-bit update (the part to read closely)

`pbit_lane` is a small state machine. It visits its logical p-bits in
index order, one at a time. For local p-bit p it does the following:

| clocks | state | work |
|---|---|---|
| K_NBR+1 | `S_ACC` | Read neighbour entries p*K_NBR+k, each a 16-bit index and an 8-bit signed weight, from a synchronous table, one per clock. In the next clock, read that neighbour's state from `state_mem` (combinational) and add +w or -w to the accumulator. |
| 1 | `S_SCALE` | I = acc + h_p, then x = (I * beta) >>> 4, saturated to -128..127. beta is unsigned 8-bit with 4 fraction bits (0x10 = 1.0). A saturation raises `clip`. |
| 1 | `S_LUT` | Look up the threshold c = table[x]. |
| >=1 | `S_SAMPLE` | Wait for the next certified sample j of the lane's physical p-bit, write m_p = (j <= c), then move to p+1. |

With a certified sample waiting, an update therefore takes K_NBR+4
clocks. That is 8 clocks at the default K_NBR = 4, and the full-size run
measures 129577 clocks for 16000 updates per lane with 10 % of the
samples rejected. Samples that arrive while a lane is still computing are
not used, because the ADC stream cannot be paused. After the last local
p-bit, the lane starts the next sweep, up to the programmed number of
sweeps.

Within one lane the updates are strictly sequential, so a p-bit always
sees the latest states of its neighbours in the same lane. This is plain
sequential (Gibbs-style) sampling. The lanes run in parallel, however,
and a neighbour on another lane may change while the accumulation is in
progress. The sum then mixes old and new states. That is the usual
behaviour of parallel p-bit hardware, not an error, but a host that
wants strict sequential semantics should map strongly coupled p-bits
onto the same lane. A p-bit should not list itself as a neighbour (the
bias equation excludes j = i), and the hardware does not check this.

## Certification

`sdi_certifier` registers each sample pair. It passes the difference
sample on only when the sum sample is at least `n_min`, and it counts
accepted and rejected samples. A lane waiting in `S_SAMPLE` simply takes
the next certified sample. Uncertified ones never reach a p-bit, so a dip
in optical power costs time but does not bias the computation. The
counters can be read per lane and are cleared by each start. The
architecture only says that the sum measurement shows whether a sample
can be trusted. Making the decision per sample against one programmable
bound is this implementation's choice.

## Host interface

A single synchronous port, `host_req` (`pbit_pkg::host_req_t`):
`we` writes `wdata`, and `re` reads, with `host_rdata` valid in the next
clock. `addr[31:28]` selects the region, `addr[27:24]` the lane and
`addr[23:0]` the offset.

| region | offset | access | content |
|---|---|---|---|
| 0 control | 0 `CR_START` | W | start the programmed number of sweeps on all lanes (ignored while busy) |
| | 1 `CR_BETA` | R/W | beta, unsigned Q4.4; reset value 1.0 |
| | 2 `CR_NMIN` | R/W | certification bound on the sum sample; reset value 0 |
| | 3 `CR_SWEEPS` | R/W | sweeps per start; reset value 1 |
| | 4 `CR_STATUS` | R | {done, busy} |
| | 5 `CR_FLIPS` | R | logical p-bit updates since the last start |
| | 6 `CR_REJ`, 7 `CR_ACC` | R | rejected / certified samples of the lane in addr[27:24] |
| | 8 `CR_CLIPS` | R | updates whose beta*I saturated |
| 1 neighbours | p*K_NBR+k | W | {index[15:0], weight[7:0]} of entry k of local p-bit p |
| 2 biases | p | W | h of local p-bit p, 8-bit signed |
| 3 thresholds | x (two's complement) | W | c for beta*I = x, 9-bit signed |
| 4 states | global index | R/W | state bit (1 = +1) |

The tables are RAMs without reset and must be written before the first
start: every neighbour entry (weight 0 for unused ones), every bias and
all 256 thresholds of each lane. Tables should not be written while
`busy` is high. `busy`, a one-clock `done`, the running `flip_cnt`, and
the per-lane `lane_flip` / `lane_smp` monitor signals are also plain
outputs.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| `N_PBITS` | 64000 | logical p-bits of the reference prototype |
| `LANES` | 4 | physical p-bits of the reference prototype |
| `K_NBR` | 4 | neighbour entries per p-bit: this design's choice |
| `ADC_BITS` | 8 | ADC depth of the architecture (centre threshold 128) |
| `W_BITS`, `H_BITS` | 8 | this design's choice |
| `ACC_BITS` | 16 | this design's choice |
| `BI_BITS` | 8 | table input width: this design's choice |
| `BETA_BITS`/`BETA_FRAC` | 8 / 4 | this design's choice |

The widths are package constants in `pbit_pkg`. The sizes are parameters
of `pbit_ctrl_top`. At the defaults, synthesis gives about 6.7 Mbit of
memory: 4 x 64000 x 24-bit neighbour entries, 64000 biases, 64000 state
bits and 4 x 256 thresholds. Logic is in the hundreds of word-level
cells. `N_PBITS` must be a multiple of `LANES`. Changing `K_NBR` trades
coupling density for update rate.

## Where this RTL departs from, or goes beyond, the architecture

* **Digital biasing only.** The architecture offers three ways to bias a
  p-bit: the splitting ratio of a tunable beamsplitter, the reference of
  an analog comparator, or a digital threshold after the ADC. The
  prototype's measurements use the digital threshold, and that is the
  only one built here. The other two need DAC outputs towards the optics
  and are not included.
* **Everything inside the control unit is this design's own.** The
  architecture fixes the ADC depth, the threshold rule, the use of the
  sum measurement, the time-multiplexing of physical p-bits over logical
  ones, and the 4 / 64000 configuration. It does not describe the
  unit's internals. Several things here are choices made for this RTL:
  the sparse neighbour lists, the update order, the table-based mapping
  from beta*I to a threshold, the number formats, the host port and the
  sweep control.
* **Flip rate.** The reference prototype reports about 2.7e9 p-bit
  updates per second. This unit makes LANES/(K_NBR+4) = 0.5 updates per
  clock at the defaults, which would need a 5.4 GHz clock to match. How
  the prototype reaches its rate (for instance several samples per clock
  per converter, or a pipelined update) is not known, so no such scheme
  is implemented.
* **Raw samples as Gaussian variables.** The analog source could also
  serve continuous "g-bits" directly. The unit exposes certified samples
  only on the `lane_smp` monitor outputs and does not store them.

## Files

`rtl/` holds one module or package per file:

* `pbit_pkg.sv`: widths, default sizes, host address map and request struct.
* `pbit_threshold.sv`: the j <= c decision.
* `sdi_certifier.sv`: certification gate and counters.
* `bias_lut.sv`: the beta*I-to-threshold table.
* `state_mem.sv`: logical state memory.
* `pbit_lane.sv`: update engine of one physical p-bit.
* `pbit_ctrl_top.sv`: the complete unit (top level).

`tb/` holds one self-checking testbench per module (`<module>_tb.sv`).
It also holds:

* `pbit_ctrl_top_full_tb.sv`: one sweep over all 64000 p-bits at the
  default parameters, with every update checked against an independent
  model, followed by a state read-back.
* `pbit_sigmoid_tb.sv`: the activation curve measured over 97 bias levels
  at full size.
* `sdi_source_model.sv`: a behavioural stand-in for a physical p-bit and
  its converters. Its difference sample is the sum of four uniform
  integers in 0..63. Its sum sample occasionally drops below a bound.
* `pbit_tb_pkg.sv`: the calibration formula for the threshold tables.

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a
watchdog. The end-to-end test `pbit_ctrl_top_tb` also counts, and requires,
each mechanism: rejected samples, lanes waiting for a certified sample,
saturation of beta*I, cross-lane neighbour reads and multi-sweep runs.

To simulate with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/pbit_pkg.sv tb/pbit_tb_pkg.sv tb/pbit_ctrl_top_full_tb.sv \
    --top-module pbit_ctrl_top_full_tb -Mdir obj
./obj/Vpbit_ctrl_top_full_tb
```

Replace the testbench name to run any other. Each one finishes in
seconds. `-Wno-fatal` is needed only because the testbenches mix widths
freely.
