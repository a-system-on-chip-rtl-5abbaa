# Closed-loop sleep-stage classifier and optogenetic stimulator: digital RTL

An animal sleeps. Four electrodes pick up two EEG channels, one EOG channel and one EMG
channel. Once per second the chip turns them into 20 band-energy features and scores the
second with a small neural network. A second network, an LSTM, looks at the last 30 of those
scores and decides the sleep stage: wake, REM, N1, N2 or N3. Each stage maps to a chosen set
of light stimuli: four PWM stimulators drive an LED array of 16 pads. The loop needs no
tether and no host. That makes closed-loop optogenetic sleep experiments possible in freely
moving animals, such as non-human primates.

The SoC this follows is a mixed-signal chip in 180 nm CMOS. Its analog side has
frequency-shaping amplifiers, Gm-C band-pass filters, squarers, leaky integrators and a
10-bit SAR ADC. Its digital side has the ADC logic, the two networks, stimulus mapping and
the PWM stimulators. In the SoC a small RISC-V core runs the networks as software. This RTL
instead gives every digital block of the loop as synthesizable SystemVerilog, with both
networks as fixed-function engines. The analog parts stay outside the top level as ports.

## The loop at a glance

```
 analog (outside)                 |  this RTL
                                  |
 20 feature levels -> 20:1 mux <--+-- mux_sel ----------- feature_scanner (1 s frame timer)
                         |        |                            | adc_start
 cap. DAC + comparator <-+--------+-- adc_dac_code, sample ---- sar_logic
                     adc_comp ----+-------------------------->    | serial bits, MSB first
                                  |                          feature_sp (S/P, 20 x 10 bit)
                                  |                               | frame_valid
                                  |                          nn_stage1 20-32-18-5 -> 5 scores
                                  |                               |
                                  |                          frame_window (last 30 frames)
                                  |                               |
                                  |                          lstm_stage2 (30 steps, 5 units) -> stage
                                  |                               |
                                  |                          stim_mapping (stage -> 4-bit mask)
                                  |                               |
 LED pads <-----------------------+-- led[15:0] -- led_mux <- 4 x pwm_stimulator
                                  |
 host --- cfg_we/addr/wdata ------+-> cfg_regs -> gains, filter codes, coefficients, stimuli
```

Top module: `sleep_soc_top`. Shared types, sizes and the register map: `sleep_pkg`.

## Clock and frame timing

One clock runs the whole design, at 128 kHz. The SoC sets the PWM step to 1/128 kHz, so one
clock is one PWM step. A frame is one second, or `FRAME_CYCLES = 128000` clocks. That matches
the 1 s time constant of the energy integrators, and the 1 s segments the first network was
trained on. Within a frame the digital work finishes in under 0.1 s:

| step | clocks |
|---|---|
| scan of 20 features: 2 settle + 1 start + 12 conversion + 1 per feature | about 320 |
| first-stage network, one coefficient per clock | 1361 + 2 = 1363 |
| LSTM, 30 steps of 336 clocks | about 10 080 |

The feature levels are integrator outputs, so they change slowly. A scan therefore samples
them one after another and needs no sample-and-hold across channels. If a new frame comes
due while a scan is still running, that frame is skipped and counted in `scan_overruns`.
This cannot happen at the default sizes.

## ADC logic and the serial link

`sar_logic` is the register half of the 10-bit SAR converter. The capacitor arrays
(C0..C9 on both inputs) and the comparator are analog and sit outside. A conversion takes
one track cycle (`adc_sample`), then one bit per clock, MSB first. For bit i the logic
presents `dac_code = decided bits | 1<<i`, and `adc_comp = 1` keeps the bit. Each decided bit
also leaves at once on `bit_valid/bit_out`. This serial stream is the SoC's serial link from
ADC to processor. `feature_sp` is the serial-to-parallel converter at the other end: it packs
the bits into 10-bit words in mux order, and pulses `frame_valid` after the 20th word. A
`frame_start` in the middle of a frame discards the partial frame.

## First stage: scoring one second

`nn_stage1` has three fully connected layers of 32, 18 and 5 neurons over the 20 features.
One multiply-accumulate unit reads one coefficient per clock from a 1361 x 8-bit memory.
The memory is laid out layer by layer and neuron by neuron: the N_in weights of a neuron,
then its bias. Number formats are this design's choice:

* activations are signed Q8.8 in 16 bits. A feature enters as its ADC code / 256.
* coefficients are int8 with 6 fraction bits, so they range over -2 .. +1.98.
* each product is added to a 32-bit accumulator. The bias is aligned by << 8. The sum
  returns to Q8.8 by an arithmetic shift right by 6, which rounds toward minus infinity,
  and is saturated to 16 bits.
* the hidden layers use ReLU. The output layer is linear: its five values are the stage
  scores.

## Second stage: the LSTM over a sliding window

This is the least obvious part. `frame_window` keeps only the last 30 score vectors, in a
circular buffer. Neither raw signals nor features are stored, so the memory cost of looking
30 s back is 30 x 5 x 16 bits. Each new frame overwrites the oldest entry. Once 30 frames
have arrived, every new frame starts `lstm_stage2`. The LSTM then runs the whole window
again, oldest frame first, from a zero state. The window slides one frame at a time, so the
classifier yields one stage per second after the first 30 s.

The LSTM has 5 inputs (the scores) and 5 units, whose final hidden values are the outputs.
The stage is the index of the largest final `h`; on a tie the lower index wins. The
activations follow the SoC:

```
i, f, o = hard_sigmoid(z) = clip(0.2 z + 0.5, 0, 1)     (0.2 taken as 51/256)
g       = softsign(z)     = z / (1 + |z|)
c       = f*c + i*g
h       = o * softsign(c)
```

Each time step has two passes over shared hardware:

1. **Gate pass.** 20 pre-activations (4 gates x 5 units), each from 5 input weights,
   5 recurrent weights and a bias: 11 clocks each, 220 clocks in all. `h` stays unchanged
   during this pass, so every gate sees the previous step's state.
2. **Update pass.** Per unit: softsign of `z_g`, then the cell update, then softsign of the
   new `c`, then `h`. A single restoring divider (`softsign_unit`, 8 quotient bits, since
   |softsign| < 1) computes both softsigns. This costs 23 clocks per unit.

The coefficient memory holds 220 int8 words. The 11 words of gate `gi` (0 i, 1 f, 2 g, 3 o)
of unit `u` start at `(gi*5 + u)*11`. All values are Q8.8 with products truncated toward
minus infinity, as in stage 1.

## Stimulation

`stim_mapping` holds a 4-bit mask per stage, meaning "which stimulators run in this stage".
On each classification it latches the mask of the detected stage, and holds it until the
next classification. Clearing `loop_en` switches every stimulator off.

Each `pwm_stimulator` reproduces the SoC's timing diagram. A 32-step phase counter gives a
250 us PWM period (4 kHz). Within a period the output is high for the first `n_on` steps,
so the on-time is n_on/128 kHz; `n_on` ranges over 0..32. The on-time is refreshed once per
period: a new `n_on` takes effect at the start of the next period, so a register write never
cuts or stretches a pulse in progress. A second counter counts PWM
periods: the PWM runs during the first `t_stm` periods of every `t_per`. This is the
stimulation-ON time TSTM within the period TPER. Both are counted in 250 us periods, 16 bits
each, which allows up to 16.4 s. When a stimulator is enabled both counters restart, so a
stimulus starts with a full TSTM window. The output follows the enable by one clock.

`led_mux` lets each of the 16 pads take any one of the four stimulators, or none: a pad
enable bit plus a 2-bit source select. On chip this multiplexer routes the LED current,
through an NMOS pass device and a programmable current-limit resistor. Here it routes the
gate drive. The resistor setting is a 4-bit register field per stimulator, output as
`stim_ilim_code`.

## Register map

The host has a 16-bit word port (`cfg_we`, `cfg_addr`, `cfg_wdata`, combinational
`cfg_rdata`). A write takes effect at the next clock edge. All registers reset to 0.

| address | contents |
|---|---|
| 0x0000-0x0550 | stage-1 coefficients, 1361 words, low 8 bits (write only) |
| 0x0800-0x08DB | LSTM coefficients, 220 words, low 8 bits (write only) |
| 0x1000 | bit 0 `run` (frame timer), bit 1 `loop_en` (stimulation) |
| 0x1001 | amplifier gain codes, 4 bits per channel (16 gain steps) |
| 0x1002 | status, read only: {frames[7:0], valid, stage[2:0]} |
| 0x1004 | stage map for wake, REM, N1, N2: 4 bits each, wake in bits 3:0 |
| 0x1005 | stage map for N3, bits 3:0 |
| 0x1006 | LED pad enables |
| 0x1007, 0x1008 | LED source selects, 2 bits per pad, pads 0-7 and 8-15 |
| 0x1010 + 4s + {0,1,2,3} | stimulator s: n_on, t_stm, t_per, current-limit code |
| 0x1020 + f | feature channel f: low cut-off code in bits 5:0, high cut-off code in bits 13:8 |

The filter codes select one of 64 log-spaced corner frequencies from 0.5 Hz to 100 Hz. The
low and high corner of each channel are set separately. Feature order, as the mux scans it:
0-6 EEG Fpz-Cz, 7-13 EEG Pz-Oz, 14-18 EOG, 19 EMG.

## What is outside this RTL

These parts have no logic function, or come from elsewhere; they appear only as ports:

* the frequency-shaping EEG amplifiers and the EOG/EMG low-noise amplifiers. Their
  programmable gain leaves as `amp_gain`.
* the 20 analog feature channels: filter, Gilbert squarer and leaky integrator. The log-domain
  bias DAC that tunes them leaves as `filt_lo_code` / `filt_hi_code`.
* the 20:1 analog mux, the ADC's capacitor arrays and its comparator. These use `mux_sel`,
  `adc_sample`, `adc_dac_code` and `adc_comp`.
* the LED output stage and the pads.
* the RISC-V core. Its network and mapping work is done here by fixed-function blocks. Its
  configuration role falls to whatever host drives the register port.
* the off-line training that produces the coefficients. No trained coefficients exist here,
  so the classification accuracy of the SoC cannot be reproduced with this RTL alone.

## Where this RTL departs from the SoC or fills gaps

Taken from the SoC:

* the block structure and sizes: 20 features, 10-bit ADC, 32/18/5 neurons, LSTM over 30
  frames with 5 outputs, 8-bit coefficients, 4 stimulators, 16 pads.
* the hard-sigmoid gate activation and the softsign state activation.
* the 4 kHz PWM with a 1/128 kHz step, TSTM and TPER.
* 16 gain steps and 64 filter steps.

This design's own choices:

* the networks are fixed-function hardware, not RISC-V software.
* the hidden ReLU and the linear output layer of stage 1. The SoC names only the LSTM's
  activation functions.
* all number formats.
* reading the second stage's "30/5" as 30 time steps of a 5-unit LSTM, with argmax and no
  further dense layer.
* a zero LSTM state at the start of every window, with one classification per frame.
* the 128 kHz system clock, reading the 4 kHz refresh as a once-per-period update of the
  on-time, TSTM and TPER counted in PWM periods, and all widths of
  timing fields.
* the stage-to-mask mapping, the serial framing, the register map and the reset values.
* the 2-clock mux settling time.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

* `tb_sar_logic`: 300 conversions through an ideal comparator. Checks the code, the
  serial bits, the single sample cycle and the 12-clock latency.
* `tb_feature_scanner`: frame period, the mux walk, settling before each start, no frame
  while `run` is low, and overrun counting with a frame too short to hold a scan.
* `tb_feature_sp`: random frames sent bit-serially with gaps, including a cut-short frame.
* `tb_nn_stage1`: random coefficients, including full-range ones that saturate, against
  an integer reference model (`nn_ref_pkg`). Checks the exact 1363-clock latency.
* `tb_frame_window`: the window contents by age after each of 75 pushes, and when `full`
  rises.
* `tb_lstm_stage2`: random coefficients and windows against the reference LSTM. Checks
  the final `h`, the stage and the run time.
* `tb_stim_mapping`, `tb_pwm_stimulator`, `tb_led_mux`, `tb_cfg_regs`: each is checked
  clock by clock or register by register against a model.
* `tb_sleep_soc_top`: the whole loop at its default sizes, 40 one-second frames, about
  5.2 million clocks and under a minute with Verilator. A behavioural analog model holds
  the feature levels and answers the comparator. The testbench checks every frame's scores
  and every classification against the reference models. It also checks each stimulator
  enable and each LED pad on every clock. It counts the window filling, the sliding
  classifications, stage switches, PWM pulses, TSTM gating, a disabled pad and switching
  the loop off, and fails if any of them never happened.

To simulate, for example, the whole loop:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/sleep_pkg.sv tb/nn_ref_pkg.sv tb/tb_sleep_soc_top.sv --top-module tb_sleep_soc_top
./obj_dir/Vtb_sleep_soc_top
```

For a block testbench, replace the last file and the top module; add `rtl/sleep_pkg.sv` and
`tb/nn_ref_pkg.sv` where the testbench imports them. The design has two-state semantics
throughout: every register that is read is reset.
