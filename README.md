# A magnetic-tunnel-junction random bit generator with on-FPGA debiasing

A perpendicular magnetic tunnel junction (MTJ) has two stable states: the
free layer's magnetisation is either parallel (P, low resistance) or
antiparallel (AP, high resistance) to the fixed layer. A current pulse of
the right size switches AP to P with a probability that climbs smoothly
from 0 to 1 as the pulse amplitude grows. Put the junction in AP, apply a
write pulse tuned to the 50 % point and read the state back, and you have
one truly random bit.

Two things spoil the raw stream. The 50 % point drifts over minutes and
hours as the junction ages, so a fixed write amplitude produces a bias of
several percent after a while. And neighbouring trials are correlated over
microseconds. This design removes both on the FPGA, while the bits are
produced, so that the stream leaving the board needs no post-processing:

* **Debiasing feedback.** The ones in each window of 10^6 raw bits are
  counted. If the count is more than 0.5 % below the target (normally
  50 %), the write-pulse DAC code is raised by one LSB; if more than 0.5 %
  above, it is lowered by one LSB. The DAC is re-programmed over I2C.
* **XOR decorrelation.** Each output bit is the XOR of two raw bits 4096
  trials apart. XOR of two independent bits with bias ε each has bias
  −2ε², so a 1 % bias becomes 0.02 %; the separation keeps the two inputs
  out of each other's short-term correlation. Each raw bit is used once,
  so the output rate is half the raw rate.

With a trial rate of 10.6 MHz the generator delivers 10.6 Mb/s raw and
5.3 Mb/s after the XOR.

This repository contains the FPGA logic. The DACs, analog switches,
summing amplifier, junction, transimpedance amplifier and threshold are
board hardware; the bit stream is handed to the board's host link
(Ethernet) at the `rnd_bit`/`rnd_valid` ports. Behavioural models of the
DAC and of the analog chain are included for simulation.

## Block diagram

```
                     +-------------------- mtj_trng_top --------------------+
                     |                                                      |
 comp_in ---------->|  pulse_sequencer --raw bit--+--> xor_decorrelator -----+--> rnd_bit / rnd_valid
 (thresholded TIA)   |   |  R V W M trial         |                          |      (to host link)
                     |   |                        +--> debias_feedback       |
 sw_en[3:0] <--------+---+  (analog switches)           | write_code         |
                     |                                  v                    |
                     |   code_r, code_v ---------> dac_ctrl --> i2c_master --+--> SCL / SDA (open drain)
                     |                          (R, V, W, M=V)               |      to DAC7578
                     +------------------------------------------------------+
```

The loop closes outside the chip: the DAC voltage sets the write pulse,
the junction switches or not, the comparator reports it, the window count
moves the DAC code.

## One trial

`pulse_sequencer` closes one analog switch at a time. Each switch gates
one DAC channel onto the summing amplifier that drives the junction:

| phase | switch | channel level | purpose |
|-------|--------|---------------|---------|
| R (reset)   | `sw_en[0]` | `code_r`, large | force the junction to AP |
| V (verify)  | `sw_en[1]` | `code_v`, small | read it: must be AP |
| W (write)   | `sw_en[2]` | `write_code`, opposite polarity | switch AP→P with probability p |
| M (measure) | `sw_en[3]` | `code_v` (same as verify) | read the result |
| IDLE        | none       |  | rest before the next trial |

The comparator input `comp_in` is asynchronous; it passes two flip-flops
and is sampled on the last clock of V and of M. Because of the
synchroniser, V and M must last at least three clocks. `comp_in = 1`
means P, so the raw bit is 1 when the write pulse switched the junction,
and the fraction of ones is the switching probability.

Defaults: R 6, V 4, W 4, M 4, IDLE 2 clocks, 20 clocks per trial, which
gives 10.6 MHz with a 212 MHz clock. The order of the pulses and the
10.6 MHz rate are the published design's; the individual lengths and the
clock are choices of this implementation and are parameters.

A verify read that does not show AP (the reset pulse failed) is flagged
on `verify_fail` together with that trial's bit. The bit is still
delivered; dropping it, or counting such events, is left to the user.

## The feedback loop

`debias_feedback` counts raw bits and ones. At the end of a window of
`FB_WINDOW` trials it compares the ones with `target_ones`:

* `ones + TOL < target_ones` → `write_code + 1` (stronger write pulse,
  more switching),
* `ones > target_ones + TOL` → `write_code − 1`,
* otherwise the code is kept.

Defaults `FB_WINDOW = 1 000 000`, `TOL = 5000` (±0.5 %), and a
`target_ones` of 500 000 for 50 %. The code saturates at 0 and 4095.

Why these numbers. The DAC step is 1.8 V / 4096 ≈ 0.44 mV; near 50 % the
switching curve has a slope of about 1.6 %/mV, so one step moves the
probability by about 0.7 %. A dead band narrower than half a step would
make the loop hunt around every setting; a much wider one lets an offset
sit uncorrected for many windows. The statistical noise of a 10^6-bit
window is 0.05 %, far below the dead band, so a step is almost never
caused by chance. The loop is a bang-bang integrator with a slew limit of
one LSB per window: it follows drifts slower than about 0.7 % per window
and leaves faster fluctuations to the XOR.

Window length versus rate: the description this design follows speaks of
a feedback rate of 1 Hz and also of "once per second, i.e. 10^6 bits";
at 10.6 Mb/s those two differ by a factor of 10.6. The default here is
10^6 trials (one decision every 94 ms, about 10.6 Hz). Set
`FB_WINDOW = 10_600_000` and `TOL = 53_000` for one decision per second.
Rates above about 10 Hz were reported to start adding correlations from
the voltage steps themselves, so the longer window is the safer choice in
a real system.

`mode` selects what the code does (`trng_pkg::wmode_e`):

* `WM_FIXED` — the code stays at its loaded value: feedback off. Window
  counts are still reported on `win_ones`/`win_valid`.
* `WM_FEEDBACK` — the loop above.
* `WM_SWEEP` — calibration: the code rises by one LSB after every
  `SWEEP_WINDOW` trials (default 10^7) and each window's count is
  reported. Loading a code below the 50 % point and sweeping traces the
  switching-probability curve, from which the 50 % code is read.

`load_w` copies `init_code_w` into the code. A load or a change of mode
restarts the window.

## The XOR

`xor_decorrelator` splits the raw stream into alternating blocks of
`SEP = 4096` bits. A first block is written into a 4096 × 1 memory; each
bit of the following block is XORed with the stored bit at the same
position and sent out. So output bit *k* of a block pair is
`raw[n] ^ raw[n − 4096]` for the *k*-th bit of the second block, no raw bit
is used twice, and the output rate is exactly half the input rate over
whole block pairs. Output follows its second raw bit by one clock.

With `xor_en = 0` every raw bit is passed through. Changing `xor_en`
restarts with an empty first block.

Why 4096. XOR of adjacent bits makes things worse: consecutive trials
tend to alternate, and XOR turns that anti-correlation into a bias above
50 %. Separations of a few thousand trials are beyond the correlation
time; 4096 is the smallest separation found sufficient, and it costs one
4 kbit memory. The XOR also shifts the mean: two bits each with bias ε
give 0.5 − 2ε², always slightly below 50 %. With the feedback holding ε
near zero this residual is negligible.

## DAC programming

The pulse levels are four channels of a DAC7578 (12-bit, 8 channels,
I2C). In the reference board four of the eight channels feed inverting
stages, and the write pulse, whose polarity is opposite to the others,
uses one of those. Default channel map (parameters of `dac_ctrl`): R on
channel 0, V on 1, M on 2, W on 4, all on the DAC at address 0x48.

`dac_ctrl` remembers the code last written to each channel. After reset
every channel is pending; afterwards a channel becomes pending when its
requested code differs from the written one. The lowest pending channel is
written next, with one DAC7578 "write to and update channel n" command:

```
S | 1001000 W | A | 0011 nnnn | A | D11..D4 | A | D3..D0 0000 | A | P
```

A refused byte (no acknowledge) aborts with STOP, is counted in
`dac_nack_cnt`, and the channel stays pending, so it is retried.
`dac_in_sync` is high when every channel holds its requested value.

`i2c_master` is write-only with open-drain outputs (`*_oe = 1` pulls the
line low) and supports clock stretching. One transfer is 152 quarter
periods of `I2C_DIV` clocks: 95 µs at the default 400 kHz. A feedback
step therefore reaches the junction about 0.1 ms after the window ends,
negligible against the window.

## Top-level interface

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock (212 MHz for 10.6 MHz trials), asynchronous active-low reset |
| `run` | in | 1 | run trials; 0 stops after the current trial |
| `mode` | in | `wmode_e` | fixed / feedback / sweep |
| `xor_en` | in | 1 | XOR on (5.3 Mb/s) or bypass (10.6 Mb/s) |
| `target_ones` | in | 24 | target ones per feedback window |
| `code_r`, `code_v` | in | 12 | reset and verify/measure DAC codes |
| `init_code_w`, `load_w` | in | 12, 1 | load a write code |
| `sw_en` | out | 4 | analog switch enables R, V, W, M |
| `comp_in` | in | 1 | comparator, 1 = parallel (switched) |
| `scl_oe`, `sda_oe`, `scl_i`, `sda_i` | out/in | 1 | I2C bus |
| `rnd_bit`, `rnd_valid` | out | 1 | output stream |
| `phase`, `raw_valid`, `verify_fail` | out | | trial status |
| `write_code`, `fb_step_up`, `fb_step_dn` | out | | feedback status |
| `win_ones`, `win_valid` | out | 24, 1 | count of ones of the last window |
| `dac_in_sync`, `dac_nack_cnt`, `dac_upd_done`, `dac_upd_ch` | out | | DAC status |

Configuration inputs are plain ports; how a host writes them (register
file over the host link, switches, constants) is left to the integrator.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `R_CYC`, `V_CYC`, `W_CYC`, `M_CYC`, `IDLE_CYC` | 6, 4, 4, 4, 2 | chosen; sum 20 = 10.6 MHz at 212 MHz |
| `FB_WINDOW` | 1 000 000 | published design |
| `TOL` | 5000 | published ±0.5 % |
| `SWEEP_WINDOW` | 10 000 000 | published calibration (10^7 trials per step) |
| `XOR_SEP` | 4096 | published |
| `I2C_DIV` | 133 | chosen; 400 kHz at 212 MHz |
| `WIN_W` | 24 | chosen; holds 10^7 |
| `dac_ctrl.DAC_ADDR`, `DAC_CH` | 0x48; 0, 1, 4, 2 | chosen |

## What follows the published design and what does not

Taken from it: the R-V-W-M trial and its 10.6 MHz rate; a raw bit per
trial; the 12-bit DAC7578 with 0.44 mV steps; feedback on the raw stream
over 10^6-bit windows with ±0.5 % dead band and ±1 LSB steps toward a
user target; I2C writes to the DAC; XOR of bits 4096 apart at half the
rate; the write-pulse sweep of 10^7 trials per step; measure level equal
to verify level.

Chosen here: clock and phase lengths; bit polarity (1 = switched);
delivering bits after a failed verify; the block-pair arrangement of the
XOR (the published text gives the separation and the halved rate, not the
pairing); the I2C master, its speed and retry policy; the DAC channel map;
saturation of the code; window restart on load or mode change.

Left out: the analog board, the DACs themselves, the junction, and the
host link. Nothing here checks randomness on the chip; the output was
evaluated off-line with the NIST SP 800-22 suite in the published work.

How far to trust it: every block is checked in simulation against
independently computed results, and the whole loop is exercised against
behavioural models of the DAC and the junction. The RTL has not been run
on hardware, timing at 212 MHz has not been closed on any FPGA, and the
junction model is a smooth curve, not measured device behaviour.

## Simulation

All files are SystemVerilog-2017. Every testbench prints one line
`TB_RESULT checks=N failures=M` and ends with `$finish`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/trng_pkg.sv tb/tb_mtj_trng_top.sv --top-module tb_mtj_trng_top -o sim
./obj_dir/sim
```

| testbench | what it shows |
|-----------|---------------|
| `tb_pulse_sequencer` | pulse order and lengths, bit and verify flag against a junction model, one bit per 20 clocks, `run` |
| `tb_debias_feedback` | window counts, steps up/down, dead-band edges, saturation, sweep, fixed mode, load |
| `tb_xor_decorrelator` | `raw[n]^raw[n−4096]` at exactly half rate, bypass, restart |
| `tb_i2c_master` | DAC7578 byte format, 152-quarter transfer, refused address, clock stretching |
| `tb_dac_ctrl` | all channels after reset, one write per change, retry after refusal |
| `tb_mtj_trng_top` | whole loop at reduced windows: the code climbs from 60 LSB below and falls from 40 LSB above the 50 % point and settles, XOR output and rate, sweep, verify failures |
| `tb_mtj_trng_full` | default sizes, two full 10^6-trial windows with XOR on: first step reaches the DAC, window counts, exact half-rate output (about 20 s) |
| `tb_four_streams` | the four acquisition settings (feedback off/on × XOR off/on) on a drifting junction, 4 × 400 000 trials with a 20 000-trial window: prints mean, last-quarter mean and bin variance of each stream |

`tb/dac7578_model.sv` is an I2C slave that decodes writes into channel
codes. `tb/mtj_frontend_model.sv` models the analog chain: a logistic
switching curve of slope 1.6 %/mV centred at 358 mV, optional drift of
the 50 % point per trial, an optional anticorrelation between consecutive
trials, and a reset that fails below a set code. The models are
behavioural and not synthesizable; their numbers are illustrative, not
device data.

A typical `tb_four_streams` result (8 mV drift over the run, bins of
10 000 output bits):

| stream | mean | last quarter | bin variance (%²) |
|--------|------|--------------|-------------------|
| no feedback, no XOR | 43.9 % | 39.3 % | 12.5 |
| feedback, no XOR | 48.9 % | 48.9 % | 0.32 |
| no feedback, XOR | 48.9 % | 47.7 % | 0.87 |
| feedback, XOR | 49.9 % | 49.9 % | 0.29 |

The feedback trails a steady drift by roughly the dead band plus one step,
which is why the stream with feedback alone sits about 1 % low here; the
XOR squares that residual bias away. Binomial noise alone gives
50·50/10^4 = 0.25 %² for these bins.
