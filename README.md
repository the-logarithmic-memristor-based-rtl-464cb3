# A logarithmic memristor-based Bayesian machine in SystemVerilog

A Bayesian machine answers "which class y of a variable Y best explains these
observations?" by evaluating, for every class at once,

    P(y | O_1 .. O_n)  ∝  P(y) · P(O_1 | y) · P(O_2 | y) · ... · P(O_n | y)

with the model's likelihoods stored right next to the logic that combines them.
Earlier machines of this kind multiplied probabilities with stochastic
bit-streams and AND gates, which needs many clock cycles and handles very small
probabilities badly. This design stores every probability as a logarithm
instead, so the product becomes a sum of small integers. One inference then
takes one clock cycle, and very small probabilities are where the number
format has the most resolution.

The RTL here follows the machine described in "The Logarithmic Memristor-Based
Bayesian Machine" (Turck et al.): a test chip with 16 hafnium-oxide memristor
arrays, built in a 130 nm CMOS process. That chip has 4 observation inputs and
4 classes, and each array has 8 rows of 8-bit values. The logic is written
from that description. The memristor arrays and sense amplifiers are analog
parts, so they are given here as behavioural models. The sections below say
which parts follow the published description and which are choices made for
this RTL.

## The number format

A probability p is held as an unsigned 8-bit code n, with

    p ≈ (1/2)^(n/8),   that is   n = round(-8 · log2 p)

- n = 0 means certainty.
- Every 8 steps halve the probability, so codes 0 to 8 cover 1 down to 1/2.
- Codes 9 to 255 cover everything below 1/2.
- n = 255 is the smallest probability the format can hold, about 2.5·10⁻¹⁰.

Multiplying two probabilities means adding their codes. A true sum above 255
would wrap round to a large probability, which would be a serious error, so
the adders clip the result to 255 instead. Once a running sum has clipped it
stays at 255, and the class is read as "as unlikely as can be expressed".

The machine never normalises its result. The outputs are codes of unnormalised
posteriors, so **the most probable class is the one with the smallest code**.
The machine does not choose the winning class. The host does that, just as the
chip's microcontroller did.

## Organisation

```
                 O_1            O_2                  O_n        (from ctrl_unit)
                  |              |                    |
  prior(y_1) --> [+] <- L(O_1|y_1) [+] <- L(O_2|y_1) ... [+] <- L(O_n|y_1) --> post[0]
                  |              |                    |
  prior(y_2) --> [+] <- L(O_1|y_2) [+] <- ...                              --> post[1]
                  :              :                    :
  prior(y_m) --> [+] <- L(O_1|y_m) [+] <- ...         [+] <- L(O_n|y_m)  --> post[m-1]
```

- **Columns.** Column i belongs to observation O_i. Its value (0 to 7) is the
  row address of every array in that column.
- **Class rows.** Row j of the grid belongs to class y_j. Its arrays hold
  log P(O_i = v | y_j), with v the array row.
- **Adder chain.** Each class row sums its prior and its n likelihoods through
  a chain of saturating adders (`posterior_row`, built from `log_sat_adder`).
  The chain is purely combinational.
- **Priors.** The per-class prior is an 8-bit register (`prior_regs`). It
  resets to 0, the code of probability 1. Leave the priors at 0 and the
  machine is exactly the bare grid of the fabricated chip, in which a "prior"
  is simply fed in through the first observation column (see the Bayesian
  filter below).
- **Likelihood blocks.** Each `likelihood_block` contains a row decoder, a
  2T2R memristor array (`rram_2t2r_array`) and one precharge sense amplifier
  per bit column (`pcsa_bank`).
- **Control unit.** `ctrl_unit` routes observations to columns, times reads,
  takes programming commands and hands them to the programming sequencer
  (`prog_ctrl`).

## One inference, cycle by cycle

1. In cycle k the host drives `obs[0..n-1]` and raises `infer_valid`. If the
   machine is not programming (`infer_ready` = 1), the control unit raises the
   read strobe. Each observation drives the word line of its row in all arrays
   of its column, and the sense amplifiers resolve and latch on the clock edge
   that ends cycle k.
2. In cycle k+1 the latched likelihoods pass through the adder chains.
   `post[j]` and `post_sat[j]` are valid and `post_valid` is high for that one
   cycle. The values stay put until the next read.

A new observation vector can be issued in every cycle, so throughput is one
inference per clock and latency is one cycle. The sense-amplifier latch is the
only storage on the inference path. `post_sat[j]` reports that some adder of
class j clipped.

A read is refused while a word is being programmed: `infer_ready` is low
during that time and `infer_valid` must be held until it rises. Assertions in
`ctrl_unit` check that rule and the command hold rule below.

## Storing the model: 2T2R cells, forming, SET and RESET

This is the part with the most moving pieces, because it reflects how the
memristors behave physically.

**The bit cell.** Each stored bit uses two memristors, one on bit line BL and
one on its complement BLb, each with its own access transistor. They are
always programmed to opposite states:

| bit | BL memristor | BLb memristor |
|-----|--------------|---------------|
| 1   | LRS (low resistance)  | HRS (high resistance) |
| 0   | HRS          | LRS           |

The precharge sense amplifier charges both branches and lets them discharge
through the two devices. Whichever branch has the lower resistance falls
first, and the latch settles on that side. Because the amplifier compares two
devices instead of testing one against a fixed reference, it is very tolerant
of device spread and of a low supply voltage. The published chip read
correctly down to 0.8 V. In the model the comparison is reduced to the two
device states. A cell with both devices in the same state (unprogrammed or
damaged) reads 0.

One sentence in the published description gives the zero state as "both
devices HRS", which contradicts its own complementary rule and could not be
read by a differential amplifier. This RTL follows the complementary rule.

**Device life cycle.** The array model gives each memristor three states:

1. A new device is *unformed*. It reads as non-conducting and ignores SET and
   RESET.
2. A *FORM* pulse creates its conductive filament and leaves it in LRS.
3. A *SET* pulse then moves a formed device to LRS, and a *RESET* pulse moves
   it to HRS.

A pulse takes effect when it ends, and only if it lasted at least
`T_PULSE_MIN` cycles.

**Supplies.** On the chip the three operations need different supply
voltages:

| operation | VDDC | VDDR |
|-----------|------|------|
| FORM      | 3.0 V | 3.0 V |
| SET       | 3.5 V | 3.0 V |
| RESET     | 4.5 V | 4.9 V |

- VDDC drives the bit and source lines and VDDR the word lines. Logic and
  sensing run on VDD.
- The supplies are set from outside the chip, and level shifters on every
  array row and column translate the logic signals.
- For reading, all three supplies sit at the logic voltage.

None of this analog circuitry is in the RTL. It is the reason the programming
commands are split by operation.

**Programming commands.** The host writes a model word by word. A word is one
row of one array, addressed by class `cmd_cls`, column `cmd_col` and row
`cmd_row`. A full model takes three passes, with the host changing the
supplies between them:

| `cmd_op` | command | memristors pulsed | pulses per word |
|----------|---------|-------------------|-----------------|
| 0 | FORM  | both devices of every bit (needed once in a device's life) | 16 |
| 1 | SET   | the devices that must end in LRS: BL where the bit is 1, BLb where it is 0 | 8 |
| 2 | RESET | the devices that must end in HRS: BL where the bit is 0, BLb where it is 1 | 8 |
| 3 | PRIOR | none; writes `cmd_data` into the prior register of class `cmd_cls` | 0 |

**Handshake.** A command is taken on a cycle with `cmd_valid` and
`cmd_ready` both high. It must stay valid and unchanged until then.
`cmd_done` pulses when the command has finished.

**Sequencing and timing.** `prog_ctrl` visits the 16 devices of the word one
at a time, in the order bit 0 BL, bit 0 BLb, bit 1 BL, and so on. It spends
one cycle deciding whether a device needs a pulse. A device that needs one
gets a pulse of `PULSE_CYCLES` cycles followed by one idle cycle. A word
command therefore takes 16 + pulses·(PULSE_CYCLES + 1) cycles: 192 cycles for
FORM and 104 cycles for SET or RESET at the default of 10.

The published chip used one-microsecond pulses. The default of 10 cycles
matches that at a 10 MHz clock, but the chip's clock frequency is not
published. The chip's write drivers and any program-and-verify scheme are not
published either, so none is modelled: a pulse always succeeds.

## Using the machine as a Bayesian filter

The demonstration task classifies sleep into awake, light sleep, deep sleep
and REM, once per 5-second segment of a night. Successive stages are strongly
correlated, so the previous decision is used as evidence:

    P(Y_t = y | Y_(t-1), EEG_δ, EEG_α, EMG)
        ∝ P(Y_t = y | Y_(t-1)) · P(EEG_δ | y) · P(EEG_α | y) · P(EMG | y)

The four inputs are assigned as follows:

- **Column 0 holds the transition model.** Row k of the class-j array stores
  log P(Y_t = j | Y_(t-1) = k).
  - Rows 0 to 3 hold the four stages.
  - Row 4 means "no previous decision" and is used for the first segment.
  - Rows 5 to 7 stay unused.
- **Columns 1 to 3 hold the EEG-delta, EEG-alpha and EMG likelihoods.** Each
  feature is quantised to 8 bins.
- **The host closes the loop.** After each inference it takes the class with
  the smallest code and presents it as column 0's observation next time. The
  priors stay at 0.

Transition probabilities between stages are small, and this is where the
logarithmic format shines: an 8-bit linear or stochastic representation loses
them.

## Interface of `bayes_machine`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset of the logic (the memristors keep their state) |
| `cmd_valid` / `cmd_ready` | in / out | 1 | command handshake |
| `cmd_op` | in | 2 | 0 FORM, 1 SET, 2 RESET, 3 PRIOR |
| `cmd_cls`, `cmd_col`, `cmd_row` | in | log2 of N_CLASSES, N_OBS, N_ROWS | word address |
| `cmd_data` | in | 8 | word value (likelihood or prior code) |
| `cmd_done` | out | 1 | one-cycle pulse at the end of a command |
| `prog_busy` | out | 1 | a word is being programmed (programming supplies must be applied) |
| `infer_valid` / `infer_ready` | in / out | 1 | inference handshake |
| `obs` | in | N_OBS × log2(N_ROWS) | observation values, one per column |
| `post_valid` | out | 1 | `post` is the result of the previous cycle's request |
| `post` | out | N_CLASSES × 8 | unnormalised log-posterior codes (smaller = more probable) |
| `post_sat` | out | N_CLASSES | that class's adder chain clipped at 255 |

The chip itself was reached through a 25-pad probe card. How the pads were
assigned, and whether any signals were serialised, is not published, so the
top level offers plain parallel ports.

## Parameters and the scaled-up configuration

| parameter | default | meaning |
|-----------|---------|---------|
| `N_OBS` | 4 | observation columns |
| `N_CLASSES` | 4 | classes (rows of arrays) |
| `N_ROWS` | 8 | values per observation (rows per array) |
| `PULSE_CYCLES` | 10 | programming pulse length in clock cycles (this design's choice) |
| `T_PULSE_MIN` | 4 | shortest pulse the array model accepts (model only) |

The defaults are the fabricated chip: 16 arrays of 64 bits, 4096 bits in
all.

The gesture-recognition task needs a bigger machine: six features with 64
values each and four gestures. Set `N_OBS = 6` and `N_ROWS = 64` for it. The
published study of that machine gives its arrays as four kilobits each, while
64 rows of 8-bit codes hold 512 bits. The extra capacity is not used here.

## What is modelled, and what is not

**Synthesizable logic:**

- `log_sat_adder`, `posterior_row`, `row_decoder`, `prior_regs`, `prog_ctrl`,
  `ctrl_unit`
- the structural `likelihood_block` and `bayes_machine`

**Behavioural models of analog parts:** `rram_2t2r_array` and `pcsa_bank`.

- Each device is one of three states. Resistances, variability, drift, read
  disturb and supply dependence are not modelled.
- In particular, the loss of accuracy below 0.8 V seen on the chip is not
  reproduced.
- In synthesis, the array model comes out as a register file.

**Not present at all:**

- level shifters
- the high-voltage write drivers
- the three supply domains
- the I/O pads

These have no logic function of their own, or were not described in enough
detail.

**Departures and choices to keep in mind:**

- the complementary 2T2R coding, where the published text contradicts itself
  (see above)
- prior registers in flip-flops. The published block diagram shows a prior per
  class, while the die photograph shows only the 4×4 grid. Resetting the
  priors to 0 reconciles the two.
- combinational adder chains behind latched sense amplifiers, giving one cycle
  per inference. The published text gives only "one clock cycle".
- the command set, handshakes, pulse ordering and pulse length
- the winning class chosen off-chip

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

- compares the module with values computed independently in the testbench
- has a watchdog
- ends by printing `TB_RESULT checks=<n> failures=<n>`

| testbench | what it establishes |
|-----------|---------------------|
| `tb_log_sat_adder` | all 65,536 input pairs: sum, clipping at 255, carry flag |
| `tb_row_decoder` | every address with the enable high and low |
| `tb_posterior_row` | random chains against a clipped running sum, with and without saturation |
| `tb_prior_regs` | reset value and random writes against a shadow copy |
| `tb_pcsa_bank` | sense and hold behaviour for random device pairs |
| `tb_rram_2t2r_array` | forming, SET/RESET on formed and unformed devices, short pulses ignored, row reads |
| `tb_likelihood_block` | words written device by device read back, one-cycle read, deselected block untouched |
| `tb_prog_ctrl` | exact pulse list, pulse length and command duration for random FORM/SET/RESET commands |
| `tb_ctrl_unit` | observation routing, one-cycle `post_valid`, prior writes, block selection, reads held off during programming |
| `tb_bayes_machine` | the whole machine at default size (see below) |
| `tb_sleep_stage_filter` | the Bayesian-filter workload at default size |
| `tb_gesture_scaled` | the gesture workload on the 6 × 64-row configuration |
| `tb_bit_error_sweep` | the filter workload with stored bits corrupted at 0, 1% and 5% bit error rate |

**`tb_bayes_machine`** runs at full default size, with no parameter changes.
It:

- forms, SETs and RESETs all 128 words
- writes priors
- checks 2,000 back-to-back inferences against a reference model, including
  clipped sums
- rewrites a word while reads are being requested
- runs 200 steps of a Bayesian filter with feedback

It counts each of these mechanisms and fails if any of them never happened.

The bit-error sweep programs words with randomly inverted bits, which stands
in for memristors that read wrongly. Because the stored value is a logarithm,
a flipped high-order bit changes a probability by a factor of up to 2^16.
The accuracy therefore degrades visibly between 1% and 5% errors.

**The workload testbenches use synthetic models and data.** The recorded sleep
and gesture data sets are not part of this repository. So their printed
accuracies show that the machine computes the intended inference exactly
(every posterior is checked bit for bit). They do not reproduce the published
accuracy figures.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/bm_pkg.sv tb/tb_bayes_machine.sv --top-module tb_bayes_machine
    ./obj_dir/Vtb_bayes_machine

Replace the testbench name to run any other one. Every module in `rtl/` also
passes `verilator --lint-only -Wall`.

## Files

- `rtl/bm_pkg.sv`: code width, opcodes, cell-side and device-operation types
- `rtl/log_sat_adder.sv`, `rtl/posterior_row.sv`: the arithmetic
- `rtl/row_decoder.sv`, `rtl/rram_2t2r_array.sv`, `rtl/pcsa_bank.sv`,
  `rtl/likelihood_block.sv`: the likelihood memories
- `rtl/prior_regs.sv`, `rtl/prog_ctrl.sv`, `rtl/ctrl_unit.sv`: state and
  control
- `rtl/bayes_machine.sv`: the top level
- `tb/`: the testbenches listed above
