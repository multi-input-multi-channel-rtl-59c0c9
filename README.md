# A four-input multi-channel analyzer in SystemVerilog

Gamma spectroscopy of food samples needs long counting times, and a laboratory
that measures many samples wants several detectors running at once without
buying one commercial multi-channel analyzer (MCA) per detector. This design puts
four MCAs behind one microcontroller bus. Each input receives the digitised
output of a spectroscopy amplifier, finds every pulse on it, measures the pulse
height and adds one count to the channel for that height. A 1024-channel
histogram (the energy spectrum) is built for each input. The microcontroller sets
the thresholds, starts, stops and clears each input. It also reads the last pulse
height when an input raises its interrupt, and downloads the spectra for display
and analysis on a PC.

The RTL follows the MIMCA system of H. Andrianiaina, H. Rongen et al.
("Multi-Input Multi-Channel Analyzer (MIMCA) using universal FPGA board"). That
system runs on the UNIO52 acquisition board: a 12-bit, 40 MHz ADC, an FPGA and an
8052-based USB microcontroller. The publication describes the pulse height
algorithm in detail and the rest of the system only by what it does. So the
pulse height detector is the part closest to the original. The spectrum memory,
the event register and the register interface are this implementation's own
construction around the functions the publication names. The section
"Departures and open points" lists every such choice.

## Structure

```
mimca_top
 ├─ host_regs            local-bus register file, one per design
 └─ mca_channel  x 4     one per input
     ├─ pha_detector     pulse height analysis
     └─ spectrum_memory  1024 x 32-bit histogram
mimca_pkg                widths, structs, state encoding, register map
```

Everything runs on one clock, the ADC sample clock (40 MHz on the original
board), with one new sample per input per clock. Reset is asynchronous and
active low. The ADCs and the microcontroller are outside the design: each input
has a 12-bit sample port `adc_data[i]`, and the microcontroller side is a simple
synchronous bus (`lb_*`) plus one interrupt line `irq`.

## Pulse height detection (`pha_detector`)

This is the core of the design. A pulse from the amplifier is a hump of a few
microseconds on top of a baseline. The detector has to find the hump's top
sample, and it must reject humps it cannot measure correctly. Four settings
control it:

| setting  | original name  | meaning |
|----------|----------------|---------|
| `ll`     | sMcaLL         | lower level: a sample **greater** than it starts a pulse |
| `lll`    | sMcaLLL        | lowest lower level: a sample **lower** than it ends the pulse |
| `ul`     | sMcaUL         | upper level: a maximum **greater** than it is rejected |
| `max_len`| sMaxPulsLen    | a pulse of **more** samples than this is rejected |

Because `lll` sits below `ll`, the detector has hysteresis. Noise on the falling
edge near `ll` does not split one pulse into two. The states are:

* **IDLE.** The detector waits, while `run` is high, for a sample above `ll`.
  That sample starts the running maximum and sets the length count to 1.
* **SAMPLING.** Each following sample that is not below `lll` updates the
  running maximum and adds one to the length. A sample below `lll` ends the
  pulse. If the length count exceeds `max_len`, the pulse is marked too long
  and ends at once.
* **DECIDE.** This state lasts one clock. A pulse that was too long, or whose
  maximum is above `ul`, gives a `discard` strobe. Otherwise `event_valid`
  strobes with the maximum on `event_max`. The sample arriving during this
  clock is ignored.
* **WAIT_LOW.** This state is entered only after a too-long pulse. The detector
  waits for a sample below `lll`, so that the rest of the long pulse is not
  taken as a new one.

Timing: suppose the first sample below `lll` is taken at clock edge *n*. Then
the strobe is high during the clock after edge *n+1*. Two pulses therefore need
at least one baseline sample between them. Rejecting pulses above `ul` keeps
ADC-clipped and piled-up pulses out of the spectrum. The length limit removes
pulses distorted by pile-up or by baseline excursions.

The design has no pile-up rejection and no dead-time correction. The original
system lists both as still to be done.

## Spectra (`spectrum_memory`)

An accepted maximum (12 bits) selects channel `event_max[11:2]`, so each
channel is four ADC codes wide. The memory for one input is 1024 words of 32
bits. The increment takes two stages: the word is read in the cycle of the
request and written back, plus one, in the next cycle. Suppose a request comes
for the word being written in that same cycle. It then takes the value being
written, not the stale memory output. As a result, one increment per clock is
accepted without loss, although the detector produces at most one every three
clocks. Counts saturate at 2^32 - 1; an overnight run with about 5×10^4 counts
per channel is far from that limit.

A clear writes zero to one word per clock, which takes 1024 clocks. The clear
also runs after reset, so the simulation (and the FPGA) never starts with
random spectrum contents. Pulses that end during a clear are dropped, and the
counters do not count them. The host reads any word through a second read
port, one clock after presenting the address. Reads do not disturb counting.

## Events, interrupt and counters (`mca_channel`)

Each accepted pulse also goes into an event register. This is the interface of
the original design, where the microcontroller is interrupted to read the event
maximum. The register sets the input's interrupt flag, and reading it through
the bus clears the flag. If a new event arrives before the old one is read, it
overwrites the old one and the flag stays set. A pulse arriving in the very
clock of the read also keeps the flag set, so no event is acknowledged unseen.
Two 32-bit counters count stored and rejected pulses since the last clear. The
host derives the total and the count rate from them.

## Bus and register map (`host_regs`)

The bus is synchronous with the sample clock. A write (`lb_cs & lb_wr`) takes
effect at the clock edge that samples it. A read (`lb_cs & lb_rd`) returns
`lb_rdata` with `lb_rvalid` one clock later, for registers and spectrum words
alike.

Address fields (16 bit):

| bits    | meaning |
|---------|---------|
| [15:14] | input 0…3 |
| [13]    | broadcast: a write goes to all four inputs |
| [12]    | 1: spectrum window, channel number in [9:0] |
| [3:0]   | register, when [12] is 0 |

| offset | name      | access | content |
|--------|-----------|--------|---------|
| 0      | CTRL      | R/W    | bit 0 run; bit 1 clear (write 1, acts once) |
| 1      | LL        | R/W    | lower level, 12 bit |
| 2      | LLL       | R/W    | lowest lower level, 12 bit |
| 3      | UL        | R/W    | upper level, 12 bit |
| 4      | MAXLEN    | R/W    | maximum pulse length in samples, 16 bit |
| 5      | STATUS    | R      | bit 0 run, 1 clearing, 2 event pending, 3 inside a pulse |
| 6      | EVENT     | R      | last accepted maximum; reading clears the event flag |
| 7      | ACCEPTED  | R      | stored pulses |
| 8      | DISCARDED | R      | rejected pulses |

After reset every input is stopped, with LL = LLL = 0, UL = 4095 and
MAXLEN = 65535. `irq` is the OR of the four event flags; STATUS shows which
input raised it. A typical session works as follows:

1. Write LL, LLL, UL and MAXLEN through the broadcast address.
2. Write CTRL = 1 to start the inputs.
3. Service `irq`, or poll the counters.
4. Write CTRL = 0 to stop.
5. Read the 1024 words of each spectrum.
6. Write CTRL = 2 to clear.

`run` only controls whether a *new* pulse may start. A pulse already being
measured when the input stops is still completed.

## Size

The four inputs use 128 Kbit of memory, 1024 × 32 bits each. Ideally these
map to block RAM with one write port and two synchronous read ports. Generic
synthesis of the top with yosys gives about 610 word-level cells and 964
flip-flop bits besides the memories.

## Departures and open points

These parts follow the original description:

* the detector's four settings and its comparisons;
* the running maximum;
* rejection above the upper level and of too-long pulses;
* the interrupt that carries the pulse maximum;
* 1024-channel spectra;
* four inputs under one central control (thresholds, start, stop, clear);
* the 12-bit, 40 MHz sampling.

These parts are this implementation's own choices:

* **State machine details.** The original algorithm is known here only from
  its description in words. The state encoding, the one-clock DECIDE state,
  the WAIT_LOW state after a too-long pulse, and the point at which length
  counting starts are therefore this design's own.
* **Where the spectrum lives.** The original only says that spectra are stored
  and incremented in the board's memory. It is not clear whether the FPGA or
  the microcontroller (which has its own 32 KB RAM) adds the counts. Here the
  FPGA holds all four spectra. The event register and its interrupt are kept
  as well.
* **Bus.** The original system connects the 8052-type microcontroller and
  the FPGA by a local bus carrying data, address and control, but its width,
  protocol and register map are not given. This design uses a 32-bit
  synchronous bus with the map above. An 8-bit 8052 data bus would need a
  small bridge in front that latches 32-bit words.
* **Channel mapping** (height / 4), the 32-bit count width, saturation, the
  clear sweep and clear-on-reset, the rejected-pulse counter, broadcast writes,
  the reset values and a single clock domain are all choices of this design.
* **How inputs map to boards.** In the original rack the four MCA channels may
  be spread over several boards with two inputs each. Here they are one design
  with four sample ports.

Not included: the ADC, the USB microcontroller and its firmware, the PC
software with its automatic peak search, and the board's other peripherals.
The peak search takes the difference of two successive spectra and finds the
index of its maximum; the testbenches do this themselves.

## Simulation

The testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. Each has a watchdog
that counts a failure if the test hangs. Build and run one with Verilator 5,
for example:

```
verilator --binary --timing --assert -Irtl \
    rtl/mimca_pkg.sv rtl/pha_detector.sv rtl/spectrum_memory.sv \
    rtl/mca_channel.sv rtl/host_regs.sv rtl/mimca_top.sv \
    tb/mimca_bus_if.sv tb/tb_mimca_top.sv --top-module tb_mimca_top
./obj_dir/Vtb_mimca_top
```

The testbenches of the whole analyzer drive the bus through `mimca_bus_if`, a
testbench interface that models the microcontroller's write and read cycles.

Variables left uninitialised start at random values in a two-state simulator;
the design resets or clears everything it reads.

| testbench | what it shows |
|-----------|---------------|
| `tb_pha_detector` | Random pulse stream, including pulses above UL, too-long and back-to-back pulses, and a stretch with `run` low. A separate reference walk over the stream predicts every strobe, its maximum and its exact clock. |
| `tb_spectrum_memory` | Runs at 16 × 6 bits. Random increments, many back-to-back on one channel (forwarding), saturation, clear length of 2^CH_W clocks, increments dropped during a clear. |
| `tb_mca_channel` | A pulse stream against a histogram predicted from the pulse list, all 1024 channels. Also the counters, the event register and interrupt, and clear. |
| `tb_host_regs` | Every register, broadcast writes, the clear pulse, read latency, interrupt acknowledge on EVENT reads only, and the spectrum window. |
| `tb_mimca_top` | End to end at full size. Covers broadcast setup, one interrupt-serviced pulse per input, pulse streams into all four inputs, stop, comparison of counters and all 4 × 1024 channels, and clearing one input. Counts that accept, both rejections, interrupt, stop, clear and broadcast each happened. |
| `tb_linearity` | The 23 pulser settings of the original linearity table (peak channels 46 … 1016). Pulse heights are spread around each setting. The peak channel is found from the difference of successive spectra and checked. |
| `tb_dnl_sweep` | A sliding pulser: every ADC code above LL, twice. Every channel must hold the same count. Prints mean, sigma and DNL (0 % for the digital chain). |
| `tb_count_rate` | Poisson-spaced CR-RC pulses of one height, shaping 1 µs and 4 µs, up to 39 and 30 kcps, with pile-up. The peak must stay in channel 689. Prints how many pulses land in the peak and how many are rejected. |

The measured imperfections of the original system are not reproduced: an INL
of about ±0.7 %, a DNL of ±2.3 %, a peak shift of up to 0.44 % with count rate,
and 21 % FWHM for the 137Cs line. They arise in the amplifier and the ADC,
which are not modelled, and in the coarse 1024-channel binning. The digital
chain modelled here is exact: every channel is exactly four ADC codes wide, so
a test of the RTL alone gives zero DNL.

## Changing the design

Widths and the number of inputs are in `mimca_pkg`. `spectrum_memory` takes
`CH_W` and `CNT_W` as parameters, and `mimca_top` / `host_regs` take `N_IN`
(at most four with the 2-bit input field of the address). To use more
channels, for example 4096 channels for the full 12-bit resolution, raise
`CH_W` in the package. The bin then becomes `event_max[11 -: CH_W]`, and the
spectrum window field `[CH_W-1:0]` must stay below address bit 12.
