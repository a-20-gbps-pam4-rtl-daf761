# GBS20: a 20.48 Gbps PAM4 transmitter core in SystemVerilog

GBS20 is a radiation-tolerant transmitter ASIC for detector read-out links.
It doubles the throughput of a 10.24 Gbps NRZ link without a faster
serializer. Two ordinary 10.24 Gbps serializers run side by side from one
clock. Their outputs are added with weights 2 (MSB) and 1 (LSB) into a
four-level (PAM4) signal that drives a VCSEL directly. The receiver then
sees 10.24 G symbols/s carrying 2 bits each. Both streams come from the
same PLL and the same divider, so they leave the chip in step. No clock
recovery is needed between them.

This repository holds synthesizable RTL for the digital part of that
chip: input phase alignment, PRBS scrambling, 8:1 serialization, the
triplicated clock divider and the I2C configuration interface. It also
holds a behavioural model of the analog PAM4 combiner, so the output can
be observed as a current. The PLL, the line receivers, the delay line and
the limiting amplifiers are analog, and this code does not model them.
Their signals are ports of the top module.

## Data path

```
 DataIn[7:0]  --> 8 x erx_aligner --8b--> encoder --8b--> serializer --> ser_lsb --+
 (16 phase samples each)                  (PRBS7)          (8:1)                    |  pam4_combiner
                                                                                   +--> dout_ma
 DataIn[15:8] --> 8 x erx_aligner --8b--> encoder --8b--> serializer --> ser_msb --+  (+-2I, +-I)
                   \____________________ gbs20_channel ____________________/

 clk_ser --> clock_divider (TMR) --> ui_en (1.28 GHz), bit_en, word_en; ui_en also on test_clk
 clk_ref (40 MHz) --> i2c_target + gbs20_regs --> configuration  (status back: lock, phase)
```

There are sixteen user channels, each at 1.28 Gbps. They split into two
groups of eight. Channels 7..0 form the LSB group and 15..8 the MSB group.
Channel *k* of a group becomes bit *k* of the group's 8-bit word. Bit 0 is
sent first.

## Clocking, rates and latency

The chip's PLL makes 1.28, 2.56 and 5.12 GHz clocks. The serializers
probably use both edges of the fastest one. The RTL instead runs the whole
data path on one clock, `clk_ser`, with one cycle per 10.24 Gbps bit. The
slower clocks become one-cycle enables made by `clock_divider`:

| strobe    | RATE_FULL (20.48 Gbps PAM4) | RATE_HALF (10.24 Gbps PAM4) |
|-----------|-----------------------------|-----------------------------|
| `ui_en`   | every 8 cycles (1.28 GHz)   | every 8 cycles              |
| `bit_en`  | every cycle                 | every 2nd cycle             |
| `word_en` | every 8 cycles              | every 16 cycles             |

At half rate each serial bit lasts two `clk_ser` cycles, so the line runs
at 5.12 Gbps. The encoder takes only every second aligned word. A channel
must then carry 0.64 Gbps, with each bit held for two UIs, for no data to
be lost. This is this implementation's reading of the 10.24 Gbps mode; the
chip's own scheme is not documented.

Latency at full rate, from the UI whose phase samples are strobed at cycle
*c*: the aligner registers the bit at *c*. The encoder registers the word
at *c* + 8. The serializer loads it at *c* + 16. Bit *j* is on
`ser_lsb`/`ser_msb` during cycle *c* + 16 + *j*. The end-to-end testbench
checks this exact latency.

The I2C interface and the registers run on the 40 MHz `clk_ref`. The
configuration is meant to be static while data flows. It passes into the
`clk_ser` domain through two register stages, and status returns the same
way. These stages are simple resynchronisers, not a handshake: a multi-bit
field written while in use can be seen half-updated for one cycle.

## Input phase alignment (`erx_aligner`)

The input channels arrive from an FPGA with an unknown phase relative to
the on-chip 1.28 GHz clock. In silicon, a 16-stage delay line gives 16
phases of that clock, 48.8 ps apart (16 x 48.8 ps is one 781 ps UI). A
16:1 multiplexer picks one phase to latch the channel. In this RTL, `taps`
holds the channel as latched at each of the 16 phases during one UI. This
is the interface to the analog front end.

The phase is chosen by a scan:

1. The aligner steps through the 16 candidate phases *p*. It dwells
   `DWELL` UIs (128 by default) on each one.
2. On each UI it checks whether the sample at *p* differs from the sample
   at the phase before it (for *p* = 0, phase 15 of the previous UI). A
   difference means a data edge fell between the two phases. It counts
   such UIs.
3. The phase with the most edges is where the data switches. The aligner
   then samples half a UI away, at phase (edge + 8) mod 16, and raises
   `locked`.

A scan takes 16 x DWELL + 1 UI strobes, about 1.6 us at 1.28 GHz. Ties go
to the lowest phase. Turning automatic mode off selects the per-channel
phase from the registers instead. Turning it back on starts a new scan.
While scanning, the output keeps using the last locked phase.

`tb/vcdl_model.sv` is a timed model of the front end, written for
testing only. On each 1.28 GHz clock edge it latches the channel at 16
instants 48.8 ps apart, with optional random jitter. It hands the 16
samples over as `taps` on the next edge. `tb_erx_aligner_timed` places
the data transitions at 40 random offsets in picoseconds. It checks that
the locked phase samples at least 0.35 UI away from the transitions, and
that 300 following bits arrive without error.

One consequence: when the edge lies at phase 8 or later, the chosen
phase comes before the edge in the same UI. The re-timed bit is then the
previous UI's bit, which adds one UI of latency on that channel. Word framing downstream
does not depend on it, but channels can differ by one UI.

## Scrambling and the PRBS (`encoder`)

Each group has a free-running 2^7-1 PRBS generator (x^7 + x^6 + 1, seeded
with all ones at reset). It advances eight steps per word. In scramble
mode each data bit is XORed with its PRBS bit. This is additive
scrambling: the receiver descrambles with the same generator once it has
found the generator's phase. In PRBS mode the bare sequence goes out. This
gives a test pattern for bit-error tests, and a known sequence that a
receiver can use to find its word boundary and PRBS phase, i.e. frame
alignment. Both groups reset together and always advance together, so the
LSB and MSB streams carry the PRBS in the same phase. The testbench checks
this.

## PAM4 combination (`pam4_combiner`, behavioural)

In the chip, two differential pairs share one pair of 50 ohm loads. The
MSB pair's tail current is nominally twice the LSB pair's. The model
outputs the differential current
`dout_ma = (+-) I_msb (+-) I_lsb`, with each tail current equal to its
8-bit code times 0.0234 mA. The reset codes 128/64 give the levels -4.5,
-1.5, +1.5 and +4.5 mA. The tail currents can be set separately to
correct nonlinearity. Either limiting amplifier can be switched off. Its
branch then adds nothing, and the output is the other serializer's plain
NRZ signal. This is how each half of the chip is tested alone. The output
is limited to 12 mA on the 2.5 V supply and to 6 mA (an assumed figure)
in the 1.2 V low-power mode. The 3-bit CTLE codes and the 5-bit
capacitive-load code only set the analog frequency response. The model
carries them but does not use them.

## Configuration (`i2c_target`, `gbs20_regs`)

The I2C target uses 7-bit address 0x2A. A write sends the register pointer
and then data bytes. A read uses "write pointer, repeated START, read".
The pointer auto-increments.

| addr    | bits | field                                                    | reset |
|---------|------|----------------------------------------------------------|-------|
| 00      | 0    | rate: 1 = 10.24 Gbps per serializer, 0 = 5.12            | 1     |
|         | 1, 2 | LSB / MSB encoder mode: 0 scramble, 1 PRBS               | 0, 0  |
|         | 3, 4 | LSB / MSB limiting amplifier on                          | 1, 1  |
|         | 5    | aligners in automatic (scan) mode                        | 1     |
| 01      | 2:0, 5:3 | LSB / MSB CTLE code                                  | 0     |
| 02      | 4:0  | capacitive load code                                     | 0     |
| 03, 04  | 7:0  | LSB / MSB tail-current code                              | 64, 128 |
| 10..1F  | 3:0  | manual phase of channel 0..15                            | 0     |
| 20..2F  | 7, 3:0 | read only: channel locked, phase in use                | -     |

## Single-event upsets

Three kinds of state are triplicated:

- the divider's 4-bit cycle counter;
- the whole configuration register set;
- each encoder's 7-bit PRBS state.

Each copy is majority-voted every cycle (`tmr_voter`). An upset in one
copy therefore never reaches the logic that uses the state. Every copy
reloads the voted value (the counter: voted value plus one), so the upset
is gone one clock edge later. Two upsets in different copies of the same
register within one clock cycle are not covered. The aligners' scan state
and the data registers are not triplicated: an upset there costs one bit
or one rescan. The chip applies TMR to the clock divider "and other
digital parts" without listing them. Which parts are triplicated here is
this design's own choice.

## Files

| file | content |
|------|---------|
| `rtl/gbs20_pkg.sv` | constants, `enc_mode_e`, `rate_e`, `cfg_t`, `status_t`, PRBS step |
| `rtl/erx_aligner.sv` | per-channel phase scan and 16:1 phase selection |
| `rtl/encoder.sv` | PRBS7 scrambler / pattern generator |
| `rtl/serializer.sv` | 8:1 serializer |
| `rtl/clock_divider.sv` | triplicated strobe generator |
| `rtl/tmr_voter.sv`, `rtl/tmr_reg.sv` | majority voter, triplicated register |
| `rtl/gbs20_channel.sv` | one group: 8 aligners, encoder, serializer |
| `rtl/i2c_target.sv`, `rtl/gbs20_regs.sv` | configuration interface and register map |
| `rtl/pam4_combiner.sv` | behavioural model of amplifiers and combiner |
| `rtl/gbs20_top.sv` | the core |
| `tb/tb_*.sv` | one self-checking testbench per module, `tb_gbs20_top` (end to end), `tb_gbs20_prbs_ber` (bit-error test), `tb_erx_aligner_timed` (aligner on timed data) |
| `tb/vcdl_model.sv` | timed model of the 16-phase sampling front end, for testing |

## Simulating

All testbenches print `TB_RESULT checks=N failures=M` and stop on a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/gbs20_pkg.sv \
          tb/tb_gbs20_top.sv --top-module tb_gbs20_top
./obj_dir/Vtb_gbs20_top
```

Use the same command for any other testbench, changing its name. The
package must come first on the command line. The end-to-end test runs the
core at its default sizes in about 10 seconds and uses about 2 GB of
memory, because it keeps the whole serial output for checking. It covers:

- alignment of 16 channels with random edge phases, status read through
  I2C;
- PRBS mode, with LSB and MSB in step;
- scrambled data checked bit by bit at the exact latency, while upsets hit
  the divider;
- all four PAM4 levels;
- each amplifier switched off;
- larger tail currents on the 2.5 V supply, then the low-power supply,
  where the outer levels clip;
- manual phases, and a rescan;
- the half-rate mode.

Each of these is counted, and the test fails if one never happens.

`tb_gbs20_prbs_ber` repeats the chip's link test. Every channel carries
its own 2^7-1 sequence. Its edge sits at a random phase, with one phase of
jitter on 30% of the UIs. A receiver model in the testbench works in
three steps:

1. It finds the PRBS phase in PRBS mode.
2. It descrambles the scrambled stream.
3. It checks every one of the 16 lanes for the PRBS7 recurrence.

It does this for 100,000 bits per lane at 20.48 Gbps and again at
10.24 Gbps, and expects no error. It takes about 2 seconds.

## How far to trust it, and where it departs from the chip

- The chip's architecture is followed: the channel grouping, the 16-phase
  aligner, the 2^7-1 PRBS, the 8:1 serializers on shared clocks, the 1:2
  current weighting, switchable amplifiers, a 3-bit CTLE, a 5-bit load,
  TMR in the divider and I2C configuration. So are all the stated numbers.
- These are the implementation's own choices, since the chip's
  documentation does not give them:
  - the scan algorithm and its dwell time;
  - the PRBS polynomial, seed and bit order;
  - the register map and I2C address;
  - the width of the tail-current codes;
  - single-clock modelling with enables;
  - the 0.64 Gbps inputs in the 10.24 Gbps mode;
  - the model's current step and low-power limit.
- Analog behaviour is not modelled: delay-line jitter, amplifier
  bandwidth, peaking, eye quality and power. Neither is a receiver: no
  descrambler or frame aligner exists on the receive side except inside
  the testbench.
