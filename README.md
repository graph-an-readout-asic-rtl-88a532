# GRAPH: a 16-channel waveform recorder built on a sample-then-convert memory

GRAPH is a readout chip for cross-strip micro-channel-plate photon detectors.
Every channel is sampled continuously at up to 125 MHz into a deep on-chip
memory, 2048 samples per channel. The memory is digitised *in place*, so no
fast ADC per channel is needed. An FPGA then reads back only the few samples
around each event.

The central idea is the **HULA memory** (Hybrid Universal sampLing
Architecture). Each memory cell is at once an analog sample-and-hold and a
12-bit digital word. It has:

- a sampling capacitor,
- a comparator,
- an overwrite-protection flip-flop,
- 12 bits of storage.

The memory has two banks. While one bank samples, the other bank is digitised
all at once by a single Wilkinson (ramp-and-counter) conversion. Every sample
is therefore converted a fixed time after it was taken. In a 130 nm process
the sampling capacitors leak, so that fixed delay matters: each sample loses
a predictable amount, not a random one.

This repository is SystemVerilog for the chip's digital core and its mixed
signal memory:

- the Timebase,
- the two conversion controllers,
- the HULA banks,
- the read system,
- the trigger discriminators and their outputs,
- the serial slow control.

The analog parts are not in it: the charge amplifiers, the amplifier bypass,
the bias DACs and the LVDS pads. Their settings and signals are ports. The
ramp generator and the trigger circuit are behavioural models. Every other
block is synthesizable RTL.

## Memory organisation

| level | count | total per channel |
|---|---|---|
| sample (cell) | 64 per window | |
| window | 16 per bank | 1024 |
| bank | 2 (A, B) | 2048 |
| channel | 16 | 32768 cells in all |

Windows are numbered 0..31 across both banks: 0..15 are bank A and 16..31
are bank B. A cell's linear address is `{channel[3:0], window[4:0],
sample[5:0]}`, which is 15 bits. Read back in that order, the memory gives
channel 0 from sample 0 of window 0 to the last sample of window 31, then
channel 1, and so on.

## How a cell records and converts (hula_bank, conversion_controller, ramp_generator)

This is the part that is hardest to see from a block diagram.

**Sampling.** A cell's switch is closed while both its window-select bit and
its sample-row bit are high. While closed, the capacitor tracks the channel
input. When the switch opens, the capacitor holds the last value. All 16
channels of one (window, sample) position sample at the same time. In the
model the capacitor is a register that holds a 16-bit code of the voltage.

**Converting.** Each bank has its own conversion controller. When a
conversion starts, the controller:

- starts a linear ramp, and
- runs a 12-bit counter at the conversion clock.

The counter drives a Gray-coded bus that reaches every cell of the bank.
Every cell that is not yet locked copies that bus into its 12-bit memory.
The memory "follows" the counter.

At the first conversion-clock edge where the ramp is above the cell's held
voltage, the comparator sets the lock flip-flop. From then on the memory is
cut off from the bus and keeps the count it has. So the stored word is the
time the ramp took to pass the sample: a 12-bit code of its voltage.

The bus is Gray coded so that a cell caught while the counter changes is
off by at most one count. Only one bit changes per step. The read system
decodes Gray to binary on the way out.

In the model the ramp rises by `slope` code units per conversion clock.
With the default slope of 16, 4096 counts span the whole 16-bit input
scale. The stored code for a held value `v` is the first count `c` with
`c*slope > v`:

    code = min(floor(v / slope) + 1, 4095)

A cell the ramp never passes keeps 4095, the last count. The ramp stops at
the top of the scale and the counter stops at 4095.

**Ending.** The conversion runs for as long as the Timebase's request for
that bank is high. When the request falls, the controller:

- resets the counter and the ramp, and
- pulses `unlock` for one clock, which clears every lock in the bank.

The digitised words stay in memory until the next conversion of that bank.
The request reaches the conversion clock through a two-flop synchroniser.
The conversion therefore starts and ends two conversion clocks after the
Timebase edge, which is the same fixed delay for every sample.

**Clock ratio.** A bank samples for 1024 sampling clocks. The conversion has
that same time to count to 4096. So full 12-bit range needs a conversion
clock at least four times the sampling clock: 500 MHz for 125 MHz sampling.
A slower conversion clock gives fewer counts, and the slope must then be
raised to cover the input range. A faster one just lets the counter reach
4095 and wait.

Each bank has its own slope register. This lets the two banks' gains and
pedestals be matched.

## The Timebase and the revolution

The Timebase runs on the sampling clock. It has three parts:

- A 64-bit circular shift register carries a sample-actuation pulse. The
  pulse's width is programmable, 1..63 clocks. Each bit drives one sample
  row of every window.
- A 5-bit window counter steps each time the pulse's leading edge wraps
  from sample 63 to sample 0. Its one-hot decode selects the sampling
  window.
- `AnB` is the window counter's top bit. It is 0 while bank A samples
  (windows 0..15) and 1 while bank B samples. It is also a chip output.

While bank A samples, `convert_b` is high. While bank B samples, `convert_a`
is high. So each bank is converted during exactly the 1024 clocks in which
the other bank samples:

    sampling clock  0 ......... 1023 | 1024 ........ 2047 | 2048 ...
    AnB             0                | 1                  | 0
    sampling        bank A           | bank B             | bank A
    convert_a       0                | 1 (A digitised)    | 0
    convert_b       1 (B, old data)  | 0                  | 1

Bank A's digitised words are readable from the moment its conversion ends
until it is converted again one revolution later. That is a whole bank
period, 8.192 us at 125 MHz. During that time the bank is sampled again,
but sampling only changes the capacitors, not the 12-bit memories. This is
the double buffering that lets reading overlap recording.

`rst` is active high and synchronous to the sampling clock. While it is
high nothing samples and neither bank converts. On the first clock edge
after it falls, sample 0 of window 0 is taken. From then on an FPGA counter
of 11 bits, released by the same edge, tells which of the 2048 positions is
being written.

With a pulse width above one clock, a cell keeps tracking for several
clocks and holds the value at the pulse's trailing edge. The window select
follows the leading edge. So the last few samples of a window stop tracking
when the window select moves on.

### Continuous and loop mode

- **Continuous mode** revolves for ever. Triggers do not stop it. The FPGA
  uses the trigger outputs to decide which samples to read while they are
  available.
- **Loop mode** waits for a trigger. The trigger can be the internal
  hardware trigger (the OR of all channel discriminators) or a software
  trigger written over the slow control. Each of the two has its own mask.
  On the first unmasked trigger, sampling finishes the revolution in
  progress, up to sample 63 of window 31. Then sampling stops. `convert_b`
  stays high for one more bank period so bank B is digitised too. Then the
  chip halts (`halted = 1`) with all 2048 samples of every channel
  digitised, and waits for `rst`.

The memory then holds the last full revolution before the stop. Draining
all 32768 words at a 60 MHz read clock takes 546 us. That is 48 KiB of
12-bit data.

## Reading the memory (readout)

The read system is independent of sampling and conversion. It has its own
clock, and it reads the digitised memories through a separate read bus.

An address is shifted in on three serial lines: channel, window and sample.
Each is 6 bits, sent MSB first, one bit per rising edge of the read clock.
The line `load` is raised on the edge that carries the sixth bit. On that
edge:

- the address becomes the *offset*,
- the read counter restarts at 0.

On every other edge the counter steps by one. The cell read is
`offset + counter` in the linear order above. So one load streams as many
consecutive samples as the FPGA keeps clocking. The stream crosses window
and channel boundaries without a break.

The addressed word is Gray-decoded and registered on the next rising edge
into `dout`, which has 12 bits. The FPGA takes it on the falling edge.
`dout_valid` rises after the first load.

    rising edge  k        k+1      k+2     ...  k+6      k+7
    serial       A bit 0  B bit 5  B bit 4 ...  B bit 0
    load         1        0        0            1
    dout after   -        A+0      A+1     ...  A+5      B+0

The bottom line is the intended event read. While the six samples of one
channel are streamed, the next channel's address is already shifted in. So
an event of 8 channels x 6 samples costs 48 read clocks, with no gap.

Only the low 4 channel bits and 5 window bits are used; the upper bits are
ignored. Reading a bank while it is being converted returns words that are
still changing.

## Triggers (trigger_channel, trigger_section)

Each channel has a discriminator with three settings:

- a threshold,
- a rising/falling select,
- a pulse-width code.

The comparator is high while the threshold is above the signal. An XOR
with the select bit picks which crossing is active. The active crossing
clocks a flip-flop whose D input is tied high. The flip-flop's output is
the trigger. An RC-style delay clears the flip-flop again after the
programmed width.

In the model, `rf_sel = 1` fires when the signal rises above the threshold
and `rf_sel = 0` fires when it falls below it. The pulse lasts `width + 1`
ns, which covers 1..256 ns.

The outputs of adjacent channels (0/1, 2/3, ... 14/15) are ORed onto eight
LVDS trigger outputs. The OR of all sixteen is the internal hardware trigger
that stops loop mode.

The trigger circuit is asynchronous. It has no clock. It is written as a
behavioural model with delays.

## Slow control (sc_receiver, sc_decoder)

The serial port has four wires: `sc_clk`, `sc_cs_n`, `sc_din` and
`sc_dout`. A frame is 64 bits, sent MSB first while `sc_cs_n` is low. The
64th bit writes it. `sc_dout` echoes the shift register's top bit, so
frames can be checked or daisy-chained.

A frame is `{address[15:0], unused[15:0], value[31:0]}`. The register map:

| address | register | fields |
|---|---|---|
| 0x0000 | CTRL | [0] loop mode, [1] hardware-trigger mask, [2] software-trigger mask, [13:8] sample pulse width |
| 0x0001 | SWTRIG | any write fires the software trigger |
| 0x0002 | RAMP | [7:0] bank A slope, [15:8] bank B slope |
| 0x0010+c | TRIG[c] | [15:0] threshold, [16] rising/falling, [31:24] width code |
| 0x0020+c | FE[c] | [15:0] amplifier option bits, [16] amplifier bypass |
| 0x0030+n | BIAS[n] | [11:0] bias DAC code, n = 0..7 |

`por` restores the defaults:

- continuous mode,
- triggers unmasked,
- pulse width 1,
- slopes 16,
- thresholds at mid scale, rising, 20 ns.

This map is this design's own. The chip's real address map is not
published.

## Clock domains

| domain | clock | blocks |
|---|---|---|
| sampling | `clk_smp` | Timebase, cell sampling |
| conversion | `clk_conv` | both conversion controllers, cell memories |
| read | `rd_clk` | read system |
| slow control | `sc_clk` | serial receiver and registers |

The crossings are:

- Configuration is quasi-static. Change it while `rst` is high. It passes
  through two-flop synchronisers.
- The hardware trigger is a level, synchronised into `clk_smp`.
- The software trigger crosses as a toggle, which is synchronised and then
  edge-detected.
- `rst` is synchronised into the conversion and read domains.

The read bus of a bank is asynchronous to the conversion clock. A word is
stable once its bank has finished converting.

## Where this model departs from the chip

- Voltages are 16-bit codes, and the comparator and ramp are ideal. The
  model has none of the chip's leakage, comparator offset, cell-to-cell
  pedestal spread or ramp non-linearity. Measured on silicon, the pedestal
  spread is about 140 counts before per-cell calibration and about 23 after.
- The figure showing the bank switch draws it near window 14/15. Here it is
  at window 15/16, so each bank has 16 full windows.
- The reset is drawn as active-high RST in the figures and named nCLR in
  the description. Here it is active high.
- The figure of the cell colours the overwrite (unlock) input as a Timebase
  signal. Here the conversion controller drives it when a conversion ends,
  as the description says.
- The exact loop-mode stop point is this design's reading of "complete one
  revolution after the trigger". So are the pulse-width range and the
  window-counter behaviour with wide pulses.
- The read system's clock regeneration output is not modelled. It is
  replaced by `dout_valid`.
- The slow-control protocol details, the register map, the defaults and
  the clock-crossing logic are all this design's own.

## Files

The package and helpers are in `rtl/`:

- `graph_pkg.sv` holds the sizes, the types and the Gray conversion
  functions.
- `cdc_sync.sv` is a two-flop synchroniser.

The blocks, one per file, all in `rtl/`:

- `timebase.sv`
- `ramp_generator.sv` (behavioural)
- `conversion_controller.sv`
- `hula_bank.sv`
- `hula_core.sv`, which holds two banks and two controllers
- `readout.sv`
- `trigger_channel.sv` (behavioural)
- `trigger_section.sv`
- `sc_receiver.sv`
- `sc_decoder.sv`
- `graph_top.sv`, the whole core

Every block has a self-checking testbench `tb/<block>_tb.sv`. It prints
`TB_RESULT checks=N failures=M`.

`graph_top_tb` runs the whole core at full size: 16 channels and 2048
samples per channel. It programs the chip over the serial port and then
runs three scenarios:

- continuous mode with region-of-interest reads while the bank is
  resampled; the 48 words of one event (6 samples x 8 channels) must
  arrive on 48 consecutive read clocks, which is 1.3 M events/s at
  62.5 MHz,
- loop mode stopped by a hardware trigger, followed by a read of all 32768
  words,
- loop mode stopped by the software trigger with the hardware trigger
  masked.

It compares every word read with the code predicted from the waveform that
was applied. It also counts each mechanism it exercised: bank switches,
conversions of each bank, triggers, reads overlapping address loads,
saturated codes, both loop-mode stops, masking and halts.

To simulate with Verilator 5 (run from the directory holding `rtl/` and
`tb/`):

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
        rtl/graph_pkg.sv tb/graph_top_tb.sv --top-module graph_top_tb
    obj_dir/Vgraph_top_tb

The full-size run takes about half a minute. The block testbenches are run
the same way with their own names.
