# Reconfigurable IR-UWB time-hopping baseband transceiver

Impulse-radio ultra-wideband (IR-UWB) sends information as a train of very short
pulses instead of a modulated carrier. That suits wireless sensor nodes because almost
all of the radio is digital, small and low power. This RTL is the digital baseband of
such a radio. On the emitter side it turns a bit stream into a time-hopped pulse train.
On the receiver side it turns the digitised received signal back into bits.

Two modulations are provided, because they sit at opposite ends of a trade-off:

* **TH-PPM** (time-hopping pulse position modulation). Every bit sends a pulse; a one
  is the same pulse delayed by a fixed shift. It is received coherently: the input is
  correlated with a template for "0" and one for "1". It needs precise synchronisation
  and more hardware, and in return has the better bit error rate.
* **TH-OOK** (time-hopping on-off keying). A one is a pulse, a zero is silence. It is
  received non-coherently by energy detection: band-pass filter, square, integrate,
  threshold. It is smaller and cheaper, with a worse bit error rate.

Everything that sets the link's behaviour is a run-time register: modulation, data
rate, time-hopping code, pulse duration (which sets the occupied spectrum) and pulse
amplitude (which sets the radio range). The node can be retuned without a new FPGA
bitstream.

## Time hopping: frames, chips and the code

The channel is divided into **frames**. Each frame is divided into `nc` **chips**, also
called time slots. Each chip lasts `chip_len` clock cycles, one sample per clock. In
every frame a user sends at most one pulse, in the chip named by its time-hopping code
entry for that frame. Different users with different codes seldom put pulses in the
same chip, and the irregular pulse spacing smooths the spectrum.

```
 frame g:  | chip 0 | chip 1 | ... | chip nc-1 |     pulse in chip th_code[g mod code_len]
 chip:     |<-------- chip_len cycles -------->|
 PPM "0":  pulse at sample 0 of the coded chip
 PPM "1":  pulse at sample ppm_shift of the coded chip
 OOK "1":  pulse at sample 0;  OOK "0": no pulse
```

A bit lasts `ns` frames, so it is sent as `ns` pulses in different chips. The bit
period is `ns * nc * chip_len` cycles, and the data rate is `f_clk / (ns * nc * chip_len)`.
The code table has 16 entries of 4 bits and a programmable period `code_len`. The
index into it counts frames from the start of the packet.

`th_frame_timer` keeps this position (sample, chip, frame, code index). The emitters
and both receivers each use one.

## Packets and synchronisation

A receiver has to know where frames begin before it can look in the right chip. Each
packet therefore starts with a **sync bit period**: `ns` frames whose pulses are all at
sample 0 of their coded chip. That is an unshifted PPM pulse, or an OOK "one". The data
bits follow, one per bit period. The emitter ends the packet when no new bit is
offered at a bit boundary. The receiver ends it after `pkt_bits` data bits and returns
to searching.

**PPM receiver.** `sync_matched_filter` is an FIR whose coefficients are the
time-reversed (and stretched) template. Its output peaks when a received pulse lines up
with the template. The receiver takes the first peak above `sync_thr`: the output has to
rise above the threshold and then fall. That peak is the first pulse of the sync period,
in chip `th_code[0]` of frame 0. The peak comes `L + 2` cycles after the pulse's first
sample, where `L = 8 << stretch_log2` is the pulse length. The start of frame 1 is then
known. A countdown of

```
W = (nc - th_code[0]) * chip_len - L - 3   cycles
```

starts the receiver's frame timer exactly there, so the timer is aligned to the input
samples. From then on the two template generators (`pulse_gen` instances) fire in the
coded chip of every frame: the "0" template at sample 0, the "1" template at sample
`ppm_shift`. Two `correlator`s multiply and accumulate each template with the input
over a bit period. `ppm_decision` outputs 1 when the "1" correlation is larger. Without
noise, the correlation on the sent side is exactly `ns` times the pulse energy. The
testbenches check that value, which proves the alignment is cycle-exact.

**OOK receiver.** There is no template. The first filtered energy sample above
`sync_thr` marks the sync pulse. The same countdown `W` places the timer so that this
sample lies `L + 2` samples into the coded chip. The integration window T then covers
`2L + 4` samples from the start of each coded chip, so it holds the whole pulse even
though the first energy crossing can fall anywhere in the first part of the pulse. The
energy of the `ns` windows of a bit is summed and compared with `ook_thr`.

The alignment is a design choice and sets a **configuration rule**. The receivers
assert it in simulation when they acquire a packet; the hardware itself does not check
it:

| modulation | requirement |
|---|---|
| PPM | `chip_len >= L + ppm_shift + 4` |
| OOK | `chip_len >= 2L + 4` |
| both | every code entry `< nc`; `1 <= nc, ns, code_len <= 16`; `stretch_log2 <= 2` |

Change the configuration only while the link is idle (`tx_busy` and `rx_locked` low).

## Pulse, spectrum occupation and radio range

The pulse template has 8 samples shaped like a Gaussian monocycle:
`-15 -50 15 100 15 -50 -15 0`. It sums to zero, so it has no DC content, and its energy
is 15900. `pulse_gen` plays it when triggered:

* each sample is held `2**stretch_log2` cycles (1, 2 or 4). A longer pulse has a
  narrower bandwidth, so this is the spectrum-occupation control;
* each sample is shifted right by `tx_att` (0..7). A smaller amplitude gives a shorter
  range, so this is the radio-range control.

The receiver templates use the same stretch and no attenuation. Thresholds must follow
the received amplitude. With the reset values (stretch 0, attenuation 0), the
matched-filter peak is 15900 and `sync_thr` is 8000. The filtered OOK pulse energy is
52250 with a peak sample of 22500, and `ook_thr` is 20000.

## Block map

| file | block |
|---|---|
| `uwb_pkg.sv` | types (`uwb_cfg_t`, `sample_t`, `mod_t`), limits, template, countdown formula |
| `uwb_cfg_regs.sv` | configuration registers on a small register bus |
| `th_frame_timer.sv` | sample/chip/frame/code-index counter |
| `pulse_gen.sv` | pulse and template generator with stretch and attenuation |
| `th_ppm_emitter.sv`, `th_ook_emitter.sv` | emitters |
| `sync_matched_filter.sv` | PPM synchronisation filter and peak detector |
| `correlator.sv`, `ppm_decision.sv` | PPM correlation and decision |
| `th_ppm_receiver.sv` | coherent receiver: sync filter, two templates, two correlators, decision |
| `bp_filter.sv`, `squarer.sv`, `integrate_dump.sv`, `threshold_decision.sv` | OOK energy-detection chain |
| `th_ook_receiver.sv` | non-coherent receiver |
| `uwb_transceiver.sv` | top: registers, both emitters, both receivers, modulation select |

The ADC, the analog pulse front end and the radio channel are not part of the RTL.
The top takes ADC samples on `rx_sample` and gives `tx_sample` (baseband pulse samples
for a DAC) and `tx_pulse` (one trigger per pulse, for a pulse generator circuit).

## Interfaces of the top

* **Register bus.** `cfg_we`, `cfg_addr[5:0]`, `cfg_wdata[7:0]`; `cfg_rdata` reads
  combinationally. Map: 0 modulation (0 PPM, 1 OOK), 1 `nc`, 2 `chip_len`, 3 `ns`,
  4 `code_len`, 5 `ppm_shift`, 6 `stretch_log2`, 7 `tx_att`, 8-10 `sync_thr` (low
  byte first), 11-13 `ook_thr`, 14 `pkt_bits`, 32-47 TH code entries. Reset: PPM,
  `nc = 3`, `chip_len = 24`, `ns = 1`, `code_len = 2`, `ppm_shift = 8`, code 2, 0, 1, 2,
  0, 1, ..., `pkt_bits = 8`.
* **Transmit.** Raise `tx_valid` with the first bit while idle to start a packet. The
  sync period follows at once. Each data bit is taken with a one-cycle `tx_ready` in the
  last cycle of the previous bit period. Keep `tx_valid` and `tx_bit` stable until
  `tx_ready`, which an assertion in the emitters checks. Drop `tx_valid` after the last
  bit to end the packet. `tx_sample` lags the internal pulse trigger `tx_pulse` by one
  cycle.
* **Receive.** `rx_sample` takes one sample per clock. `rx_valid` pulses once per
  decoded bit with `rx_bit`, and `rx_locked` is high while a packet is being received.
  A PPM bit comes out 3 cycles after the last input sample of its bit period; an OOK bit
  4 cycles after.

## Simulation

Each block has a self-checking testbench `tb/<module>_tb.sv`, which prints
`TB_RESULT checks=N failures=M`. `tb/uwb_tb_pkg.sv` is an independent reference model
of the packet waveform, used to drive the receivers and to check the emitters. The
end-to-end test `tb/uwb_transceiver_tb.sv` runs the top at its default sizes (the top
has no parameters). It loops the emitter back to the receiver through a delay and noise,
and reconfigures the link between packets. It requires at least one PPM packet, one OOK
packet, a modulation switch, a data-rate change, a TH-code change, a stretched pulse,
an attenuated pulse, several pulses per bit and a sync acquisition.
`tb/uwb_two_user_tb.sv` reproduces a two-user time-hopping example: three chips per
frame, user 1 sends 0 1 with code 2 0 and user 2 sends 1 1 with code 1 2, on one shared
channel. `tb/uwb_ber_tb.sv` counts bit errors of both links under approximately Gaussian
noise applied after synchronisation, with 200-bit packets at the reset configuration:

| noise sigma (sample units, pulse peak 100) | PPM errors | OOK errors |
|---|---|---|
| 0 | 0 | 0 |
| ~10 | 0 | 0 |
| ~25 | 0 | 82 |
| ~40 | 3 | 100 |

The coherent link tolerates far more noise than the energy detector, which is the
expected ordering. These are single runs with a fixed random seed, not error-rate
curves.

With plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/uwb_pkg.sv tb/uwb_transceiver_tb.sv --top-module uwb_transceiver_tb -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. Every test finishes in well under a
second.

## What is this design's own, and how far to trust it

The time-hopping framing, PPM as a time shift, OOK as pulse or no pulse, the coherent
receiver structure (sync filter, templates for "1" and "0", two correlators, decision),
the energy-detection chain (band-pass, square, integrate over T, threshold) and the list
of reconfigurable quantities follow the published description of the transceiver. That
description gives block diagrams and functions, not internals. These parts are choices
made here:

* sample width (8 bits), pulse template and its length, one sample per clock;
* the band-pass filter `y[n] = x[n] - x[n-2]`;
* the sync preamble, the peak rule, the countdown alignment and the OOK window T;
* fixed packet length at the receiver, the valid/ready data interface, the register map;
* stretch and attenuation as the means of spectrum and range control;
* both modulations in one top behind a mode register. The original built them as
  separate circuits, and also had non-reconfigurable ("static") versions, which are not
  reproduced;
* one matched-filter synchroniser. Two versions were compared originally without being
  described, so they cannot be told apart here.

Known limits:

* Synchronisation locks to the first pulse above threshold. With several users starting
  at once, only the receiver whose user's sync pulse arrives first locks correctly.
* There is no automatic gain or threshold control, and no hardware check of the
  configuration rule.
* Bit-error-rate behaviour over a realistic UWB channel was not measured. The tests use
  a delay and small uniform noise.
* Maximum frequency, area and power depend on the target and are not characterised.
