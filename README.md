# ADEPOS anomaly detector: RTL of the ensemble classifier and its power-saving control

A sensor node that monitors a machine spends most of its life looking at healthy data.
ADEPOS (Anomaly Detector based POwer Saving) uses that fact. The classifier is an
ensemble of small one-class neural networks ("base learners"). While the data look healthy,
only one of them is run. When the cheap answer says "fault", two more learners are run on
the same sample and the ensemble votes again. This repeats until either the vote says
"healthy", or all learners are in use and still vote "fault", and only then is a fault
declared. On the bearing data the method was developed on, the average number of neurons
evaluated over a machine's life falls from 180 to about 20. The computation saved is
roughly ninefold.

This repository holds synthesizable SystemVerilog for this scheme. It is based on the
paper *ADEPOS: A Novel Approximate Computing Framework for Anomaly Detection Systems and its
Implementation in 65nm CMOS* (Bose et al.). On that chip the base learners and the ADEPOS
loop run as software on an MSP430-class processor with a 16x16 multiply-accumulate unit, next
to an on-chip buck converter whose output voltage is set over SPI. Here the same computation
is a dedicated datapath, together with the chip's memories, its UART link and the digital
register of the converter. The processor core and the analog converter are not included
(see *What is not here*). An optional engine builds the hidden neurons from differences of a
few shared ones, which cuts the parameter memory by 60% (see *Neuron generation*).

## The decision loop

`adepos_ctrl` keeps a count `N_BL` of active learners. It is always odd, starts at 1 after
reset and is kept from one sample to the next. For each new sample:

1. Learners 0 .. N_BL-1 are evaluated, one after another, on the shared datapath `elm_bl`.
2. `majority_vote` counts how many of them flag a fault. The ensemble says "fault" when
   more than half do. N_BL is odd, so there are no ties.
3. On a fault with N_BL < NBL_MAX, N_BL grows by 2. Only the two new learners are run,
   then the ensemble votes again (back to step 2).
   On a fault with N_BL = NBL_MAX, the fault is declared (`declare_fault`).
   When the vote is healthy with N_BL > 1, N_BL shrinks by 2 for the next sample.
   When the vote is healthy with N_BL = 1, nothing changes.

The shrink step is what returns a node to one learner after a false alarm caused by the
cheap, approximate answer. Learners already evaluated on a sample keep their decision when
the ensemble grows. Software that re-runs them gets the same vote, because each learner's
answer depends only on the sample. Skipping the re-run is the cheaper of the two.

## One base learner

Each learner is a single-hidden-layer network of the extreme-learning-machine (ELM) kind.
It runs in boundary mode: it is trained on healthy data only, and its one output R is
trained towards a constant target. For a feature vector x of D values:

    h_j = | sum_i W_ji x_i + b_j |     j = 0..L-1    (absolute value as the activation)
    R   = sum_j beta_j h_j
    fault  if  |R_target - R| > lambda

W and b are random, as in every ELM. beta is trained (off-line here). lambda is a threshold
set from the errors seen on healthy training data. Each learner has its own random W and b,
so their errors are independent enough for the vote to be useful.

**Fixed point** (this design's choices). Features are 6-bit unsigned integers. All
parameters are signed 16-bit words. The hidden sum is accumulated in 32 bits, starting from
the bias. The activation is `h = min(|acc| >> H_SHIFT, 32767)`, so that h fits the 16-bit
multiplier. R is accumulated in 32 bits and wraps on overflow. The target is a signed
32-bit value and lambda an unsigned 32-bit value. The error saturates at 2^32-1. Scale the
trained weights and choose `H_SHIFT` (default 6) so that neither accumulator overflows.

**Parameter memory layout** (`prog_mem`, 16-bit words). Learner k occupies
`BL_WORDS = 4 + L*(D+2)` words from address `k*BL_WORDS`:

| offset | content |
|---|---|
| 0, 1 | R_target, low half then high half |
| 2, 3 | lambda, low half then high half |
| 4 + j*(D+2) | b_j |
| 5 + j*(D+2) + i | W_ji, i = 0..D-1 |
| 4 + j*(D+2) + D+1 | beta_j |

With the defaults (L = 20, D = 5, NBL_MAX = 9) a learner takes 144 words and the memory
1296 words.

**How `elm_bl` streams it.** After `start`, the learner presents one address per clock and
never stalls. Read data comes back one clock later. A small tag pipeline travels with the
address and tells each arriving word what it is:

- a header word is captured into the target or lambda register;
- a bias preloads the hidden-layer MAC;
- a weight is multiplied by its feature and accumulated in the hidden-layer MAC;
- an output weight is multiplied by `h` of the hidden sum just finished and accumulated
  in the output MAC.

Two `mac16` units are used, one for the hidden layer and one for the output. This lets
neuron j's output product and neuron j+1's bias load happen in the same cycle. The
processor has a single MAC and does these steps in sequence.

## Timing

| event | cycles |
|---|---|
| one learner, `start` to `done` (`elm_bl`) | BL_WORDS + 2 = 146 |
| one learner inside the controller (launch, run, hand-back) | BL_WORDS + 5 = 149 |
| each vote | 2 |
| each sample | 1 |
| healthy sample with one learner | 150 (about 10 us at 15.5 MHz) |
| a sample that takes the ensemble from 1 to 9 learners | 9*149 + 5*2 + 1 = 1352 |

`busy` on the top level is high for exactly these counts. The UART reply follows. The
original system samples a bearing every ten minutes, so even the worst case is negligible.
What matters for energy is the count of learners run, which the top level reports as
`bl_evals`.

## Host link (UART) and converter reference (SPI)

An external microcontroller loads the network, sends each sample and reads the decision.
It uses an 8N1 UART at `CLKS_PER_BIT` clocks per bit (default 135, about 115200 baud at
15.5 MHz). The byte protocol is this design's own:

| command | bytes | effect |
|---|---|---|
| write parameter word | `0x57` addr_hi addr_lo data_hi data_lo | one word of `prog_mem` |
| write feature | `0x58` index value | feature `index` of `data_mem` (low 6 bits) |
| start | `0x53` | run the ADEPOS loop on the stored sample |

When the sample is decided, the chip sends one byte:
`{declare_fault, vote_fault, 2'b00, N_BL[3:0]}`. N_BL is the value for the next sample.
Unknown command bytes are ignored. Writing memory while an inference runs is not blocked,
so the host should wait for the reply first.

The buck converter's output voltage is set by a 4-bit code:
`Vout = 500 mV + 50 mV * code`, which covers 500 to 1250 mV. `spi_vref` holds this code.
It is written over a write-only SPI port:

- mode 0, 8 bits MSB first, frame `{addr[3:0], code[3:0]}`, address 0 only;
- the new code takes effect on the eighth rising clock edge;
- the logic runs on the SPI clock, so the host can change the voltage while the core sleeps;
- reset selects 750 mV.

The intended use is 750 mV while the classifier runs and 600 mV while it is idle. The
voltage range and step are the original design's; the frame format is this design's.

## Neuron generation (optional, `NG = 1`)

Every hidden neuron of an ELM is just a random projection of x. The difference of two
random projections is again one:

    p_m  = sum_i W_mi x_i + b_m                 m = 0..L_PHY-1   (physical neurons)
    h_ab = | p_a - p_b |                                          (virtual neuron)

From L_PHY physical neurons one gets L_PHY*(L_PHY-1)/2 different virtual neurons. The 180
hidden neurons of the default ensemble therefore need only 20 physical ones (190 pairs).
Their D multiplications each are done once per sample, and every virtual neuron costs one
subtraction. The output layer is unchanged.

Setting the top-level parameter `NG` to 1 replaces `elm_bl` with `elm_bl_ng`. The
parameter memory then holds:

| address | content |
|---|---|
| 0 .. L_PHY*(D+1)-1 | physical neuron m: b_m, then W_m0 .. W_m(D-1) |
| then, per learner k | R_target (2 words), lambda (2 words), then per virtual neuron a pair word `{a[7:0], b[7:0]}` and beta_j |

A learner takes 4 + 2L = 44 words and the whole memory 120 + 9*44 = 516 words instead of
1296, i.e. 60% less. The original program-memory figure is about two thirds less. The
difference comes from this layout's 32-bit targets and thresholds and its one pair word per
virtual neuron. Which pairs each learner uses is decided at training time. Using each pair only once
keeps the learners independent. When learner 0 starts, the engine first streams the
physical block and stores the 20 pre-activations (121 extra cycles). The later learners of
the same sample reuse them. A sample's busy time becomes
`learners*(44+5) + 121 + 2*votes + 1` cycles, i.e. 171 for one learner.

With the default sizes this saves memory more than time. Per learner, NG reads 44 words
against 144, but the physical pass costs 121 cycles once per sample. With one learner
running most of the time the direct engine is faster. NG pays off for larger L or when
more learners run.

## What is not here

- **The processor core.** The chip uses an openMSP430-compatible core: its ALU, program
  sequencer and firmware. The core is third-party and its firmware was not published. The
  datapath above replaces what the firmware computed. It is not a processor and does not
  run MSP430 code.
- **The buck converter's analog parts:**
  - the leakage-based voltage reference;
  - the Vout comparator;
  - the adaptive on-time circuit (AOT). A latch is set by the comparator. A capacitor C
    charges through a PMOS and a resistor until it reaches 2/3 of the battery voltage,
    which gives `T_on = k1*Vbatt / (k2*Vbatt - k3*Vout + k4)`;
  - the zero-current detector;
  - the power switches and gate driver.

  The device values that set the AOT constants are not given, so no model of them is
  included. `vref_code` and `vref_mv` are the interface to these parts.
- **Training.** The learners are trained off-line with the OPIUM online rule, then loaded.
  No on-chip training logic is included.

## Sizes and other configurations

All sizes are parameters of `adepos_chip`, and the memory depth follows from them.

| configuration | fits the defaults? | parameters | parameter words |
|---|---|---|---|
| bearing monitoring: 5 features, L = 20, 9 learners | yes | none | 1296 |
| the same with neuron generation | no | `NG = 1` | 516 |
| ensemble sweep point: L = 30, 7 learners | no | `L = 30`, `NBL_MAX = 7` | 1498 |
| ensemble sweep point: L = 40, 5 learners | no | `L = 40`, `NBL_MAX = 5` | 1420 |
| one large network, L = 180 | no | `L = 180`, `NBL_MAX = 1` | 1264 |
| EEG seizure detection: 16 channels, up to 13 learners | no | `D = 16`, `NBL_MAX = 13` (and `NG = 1`) | 4732 (980) |

For EEG, one RMS feature per channel is assumed, and L = 20 was used for the table and the
test, because the number of neurons there is tuned per recording. `NBL_MAX` may go up to 15,
because N_BL is a 4-bit count. With `NBL_MAX = 1` there is no ensemble: a fault vote is
declared at once.

## Files

- `rtl/adepos_pkg.sv`: widths, sizes, memory layouts (direct and neuron generation), MAC
  operations, UART command codes, result byte type.
- `rtl/adepos_chip.sv`: top level.
- Datapath and control: `elm_bl`, `elm_bl_ng` (neuron generation), `mac16`, `majority_vote`,
  `adepos_ctrl`.
- Memories: `prog_mem`, `data_mem`.
- Host link: `uart_host_if`, with helpers `uart_rx` and `uart_tx`.
- Converter reference: `spi_vref`.
- `tb/tb_<module>.sv`: one self-checking testbench per module, plus `tb_adepos_chip_ng` and
  `tb_adepos_workloads` with their helper `adepos_workload_run`. Each prints
  `TB_RESULT checks=N failures=M`.

Each testbench compares against its own integer model, not against the RTL:

- `tb_elm_bl` recomputes h, R and the error in 64-bit arithmetic. It places lambda just
  above or below the error and checks the 146-cycle latency.
- `tb_adepos_ctrl` runs the decision loop against a model of the learner engine.
- `tb_adepos_chip` is the end-to-end test at the default sizes. It loads a random 9-learner
  ensemble over the UART at 135 clocks per bit. It sets each learner's lambda to the median
  of its errors over 48 random samples, so the votes mix. For each sample it checks the
  result byte, the per-learner decisions, the number of learners run and the exact busy
  time. It also switches the reference between 750 and 600 mV. It fails unless growth,
  shrinking, fault declaration and a steady one-learner sample all happen. It runs in about
  10 s.
- `tb_elm_bl_ng` checks the neuron-generation engine the same way as `tb_elm_bl`. It runs
  each sample once with the physical pass and once reusing the stored pre-activations.
- `tb_adepos_chip_ng` repeats the end-to-end test with `NG = 1`. It gives every virtual
  neuron a different pair.
- `tb_adepos_workloads` runs the other rows of the size table at the same time, each through
  an `adepos_workload_run` instance that does what `tb_adepos_chip` does. The UART runs at
  8 clocks per bit there, to keep the run short.

To simulate with Verilator 5 (shown for the top level):

    verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
        rtl/adepos_pkg.sv tb/tb_adepos_chip.sv --top-module tb_adepos_chip -o sim
    ./obj_dir/sim

Replace the testbench name for any other module. The package must come first on the command
line. Assertions in `adepos_ctrl` (N_BL odd and within range, no unsolicited `bl_done`) are
active with `--assert`.
