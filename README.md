# A dead-time-free FFT spectrometer datapath (OCTAD-S 4G4K)

This RTL is the signal-processing path of a digital FFT spectrometer, the kind
radio astronomers use to turn a sampled wideband signal into power spectra
that are integrated over time. It follows the FPGA processing of the OCTAD-S
instrument in its 4G4K configuration. A 10-bit ADC samples at 4.096 GS/s.
Every 4096-sample frame is windowed and Fourier transformed, which gives 2048
frequency channels 1 MHz apart. The spectra are squared to power and summed
over 8000 consecutive frames, which is 8 ms of signal. From each 45-bit sum a
16-bit field is kept and sent out as a packet with a header. No sample is
skipped, so the spectrometer has no dead time.

The central difficulty is rate. One streaming FFT core takes one sample per
clock, but the ADC delivers 16 samples per clock. This design runs 16 FFT
lanes side by side and puts a buffer in front of them that hands out whole
frames. The lanes are fed in lock step, so one window table and one
accumulator can serve all of them.

The FFT cores themselves are vendor IP in the original instrument. They are
not part of this RTL: the top module sends windowed frames out and takes FFT
results back in through ports. The testbenches connect a floating-point FFT
model there.

## Signal chain

```
 ADC words           +--------+   +--------+   +--------+   fft_in_*   +-----------+
 4 cores x 4 words ->| decode |-->| frame  |-->| window |------------->| 16 FFT    |
 + overflow bits     +--------+   | buffer |   |  x w[n]|              | cores     |
                      16 samples  +--------+   +--------+              | (external)|
                      per clock    16 lanes,    one coefficient        +-----------+
                                   lock step    for all lanes               | fft_out_*
                                                                            v
 packets  +-----------+   +-----------+   +-------------+   +----------+
 <--------| data      |<--| gain      |<--| accumulator |<--| |X|^2    |
  out_*   | formatter |   | controller|   | 2 banks     |   | per lane |
          +-----------+   +-----------+   +-------------+   +----------+
               ^                 ^                ^
               | timestamp       | FFT gain       | run, length
          +-----------+     +--------------------------+
          | timestamp |<----| command registers (cmd_*)|
          +-----------+     +--------------------------+
```

| Module | File | Role |
|---|---|---|
| `octad_s_top` | `rtl/octad_s_top.sv` | wires the chain, one clock domain |
| `adc_decode` | `rtl/adc_decode.sv` | de-interleaves the four ADC cores, offset binary to signed |
| `frame_buffer` | `rtl/frame_buffer.sv` | ping-pong buffer, 16 sample/clock in, 16 lanes x 1 sample/clock out |
| `window_unit` | `rtl/window_unit.sv` | none / Hanning / Blackman / custom window multiply |
| `power_detector` | `rtl/power_detector.sv` | re^2 + im^2 per lane, 32 bit |
| `accumulator` | `rtl/accumulator.sv` | lane sum and 45-bit integration in two banks |
| `gain_controller` | `rtl/gain_controller.sv` | 16-bit field at a chosen bit position, clipped |
| `data_formatter` | `rtl/data_formatter.sv` | 12-word header + 2048 words per packet |
| `timestamp_counter` | `rtl/timestamp_counter.sv` | 64-bit hardware time |
| `control_regs` | `rtl/control_regs.sv` | command registers, overflow LED |
| `octad_pkg` | `rtl/octad_pkg.sv` | window enum, register map, header constants |

## Keeping up with the ADC: lanes, groups and the frame buffer

Default sizes: `N_FFT = 4096`, `SAMPLES_PER_CLK = 16`, `NUM_FFT = 16`. With a
256 MHz clock this is 4.096 GS/s.

**Frames and groups.** The sample stream is cut into frames of `N_FFT`
consecutive samples. Sixteen consecutive frames form a *group*. The buffer
has two banks. While one bank is being written with group g, the other bank
is read out with group g-1:

* **Write side.** One clock carries 16 new samples, written as one wide word.
  Frame j of the group goes into lane j's memory. So lane 0 is filled during
  the first 256 clocks, lane 1 during the next 256, and so on. A whole group
  takes 16 x 256 = 4096 clocks.
* **Read side.** At read step n (n = 0..4095), every lane gets sample n of
  its own frame. A group therefore takes 4096 clocks to read, the same time
  it took to write. Reading of a bank starts as soon as that bank is full,
  and the next bank follows without a gap.

Because every lane is at the same sample index at the same time, the window
coefficient w[n] is fetched once per clock and used by all 16 multipliers.
The lanes also leave the FFT cores together, bin k on every lane in the same
clock. The 16 powers can then be added before they reach a single
accumulator memory, which does one read-modify-write per clock.

**Rate condition.** A group is written in `NUM_FFT * N_FFT / SAMPLES_PER_CLK`
clocks and read in `N_FFT` clocks. This needs `NUM_FFT >= SAMPLES_PER_CLK`,
and elaboration checks it. When the two are equal, as at the defaults, the
read side never stops while input is continuous. Input gaps (`in_valid` low)
only delay the read side; no data are lost.

**Overrun.** `overrun` becomes 1 and stays set if a bank is written again
before it has been read. That cannot happen with legal parameters and an
FFT that keeps up. It is reported in the packet header and the status
register.

**Latency.** The first output of a group comes three clocks after the
group's last input block, and the window unit adds two clocks.

**Memory.** 2 banks x 16 lanes x 4096 samples x 10 bits = 1.3 Mbit.

## Numbers and widths

| Signal | Width | Format |
|---|---|---|
| ADC word | 10 | offset binary; decoded as code - 512 |
| window coefficient | 17 | unsigned, 1.0 = 2^16, rounded |
| FFT input | 16 | signed, floor(x * w / 2^10); a full-scale sample uses the full 16-bit range |
| FFT output | 16 + 16 | signed re, im (set by the external cores) |
| power | 32 | re^2 + im^2, exact |
| lane sum | 36 | sum of 16 powers |
| accumulator | 45 | sum of up to 8000 spectra; 8000 x 2^31 < 2^44, so no overflow |
| output word | 16 | min(acc >> gain, 65535) |

## Window functions

The window unit holds three tables and a constant, each indexed by the sample
index n (periodic forms, n = 0..N-1):

* none: w = 1;
* Hanning: `w[n] = 0.5 - 0.5 cos(2 pi n / N)`;
* Blackman: `w[n] = 0.42 - 0.5 cos(2 pi n / N) + 0.08 cos(4 pi n / N)`;
* custom: a RAM of N coefficients, written through the command port.

The Hanning and Blackman tables are computed from these formulas when the
design is elaborated, so no data file is needed. Blackman is selected at
reset. A new selection takes effect at the next frame start (n = 0), so no
frame is windowed half one way and half the other. The custom table is
undefined until it has been written.

## Accumulation, dumps and the FFT gain

The accumulator keeps the first `N_CHAN = N_FFT/2` bins. These are the
positive frequencies of the real input; the rest are dropped.

**Start and length.** Integration starts at the first group boundary after
`run` is set. At that moment it latches the length: `num_spectra` spectra,
rounded up to whole groups of 16. The default is 8000 spectra, 500 groups.
The first group is written into the memory rather than added, so the bank
needs no clearing pass.

**Dump.** When the last group is in, three clocks after its last channel:

* the bank closes and `dump` pulses;
* the next group goes into the other bank, so consecutive dumps are exactly
  `length x N_FFT / NUM_FFT` clocks apart.

**Readout.** The gain controller reads the closed bank, one channel per clock
while the output is not stalled. Clearing `run` lets the running integration
finish and then stops. If a bank closes while the reader is still busy with
the previous one, that older dump is lost and the sticky accumulator
`overrun` flag is set. At 8000 spectra a dump lasts 2 million clocks against
about 2060 clocks of readout, so this happens only with very short lengths or
a stalled network.

**FFT gain.** The 45-bit sum is shifted right by the gain setting (0..63).
The low 16 bits are kept; a value that does not fit clips to 65535. The gain
is sampled at the dump, so it applies to the whole spectrum, and it is
recorded in the packet header.

## Output packets

The output is a valid/ready stream of 16-bit words toward a network
interface. `out_sop` marks the first word of a packet and `out_eop` the last.
One packet is sent per dump: 12 header words, then the 2048 channels in
frequency order.

| Word | Content |
|---|---|
| 0 | sync `0x4F53` |
| 1 | number of channels |
| 2..5 | timestamp at the dump, 64 bit, most significant word first |
| 6..7 | packet sequence number |
| 8..9 | number of spectra in this sum |
| 10 | flags: [0] ADC overflow since the previous packet, [1] buffer overrun, [2] accumulator overrun, [4:3] window |
| 11 | FFT gain |

The timestamp counts clock periods. It can be set with a command. The ADC's
overflow bits are ORed from clock to clock and cleared when a header takes
them.

## Command registers

`cmd_wr_en`, `cmd_wr_addr` and `cmd_wr_data` write a register; `cmd_rd_addr`
and `cmd_rdata` read one back (combinational). This is the port a network
command server would drive.

| Addr | Name | Meaning |
|---|---|---|
| 0 | CTRL | [0] run (start/stop) |
| 1 | WINDOW | 0 none, 1 Hanning, 2 Blackman, 3 custom |
| 2 | ACC_LEN | spectra per dump (reset 8000) |
| 3 | GAIN | [5:0] FFT gain (right shift) |
| 4 | TIME_LO | low word of the time to load |
| 5 | TIME_HI | high word; writing it loads the 64-bit time |
| 6 | CWIN_ADR | custom window address |
| 7 | CWIN_DAT | custom coefficient; the address then increments by one |
| 8 | STATUS | [0] ADC overflow (also `ovr_led`), [1] buffer overrun, [2] accumulator overrun; a write clears [0] |

## Interfaces at the top

* `adc_valid`, `adc_data[core][word]` and `adc_ovr[core]` come from the ADC
  capture logic, already in the FPGA clock domain. Word k of core c is time
  sample `4k + c` of the clock's block of 16.
* `fft_in_valid`, `fft_in_index` and `fft_in_data[lane]` go to the FFT
  cores: real input, index 0..N-1, all lanes together.
* `fft_out_valid`, `fft_out_bin`, `fft_out_re[lane]` and `fft_out_im[lane]`
  come back in natural bin order, all lanes on the same bin. Any latency is
  accepted. The cores must keep the lanes aligned and accept one frame per
  lane every `N_FFT` clocks.
* `out_*` is the packet stream and `ovr_led` the front-panel overflow LED.

## What follows the original instrument and what does not

**Taken from the instrument:**

* the block order: decode, window multiply, FFT, squaring, accumulator, gain
  controller, data formatter;
* a buffer in front of several parallel FFT cores;
* the four window options;
* 4096 points and 2048 channels;
* 32-bit power, a 45-bit accumulator, 8000 spectra per dump, 16-bit output;
* a header with timestamp and ADC overflow bit;
* commands for start/stop, window, accumulation time and FFT gain.

**Choices of this design:**

* the clock rate and 16 samples per clock;
* 16 FFT lanes and their lock-step grouping;
* the ping-pong banks;
* every bit width not listed above;
* rounding and clipping;
* frame-aligned window switching;
* the header layout;
* the register map;
* all handshakes.

**Departures and gaps:**

* **Accumulation length.** The original describes the accumulation time as
  set by the accumulator's bit length (40 to 48 bits, 8 ms to 2 s). Its
  specification table gives 8000 accumulations for 8 ms, not a power of two.
  Here the length is a run-time count and the width a parameter. At 45 bits,
  lengths above 8192 spectra can overflow with full-scale input.
* **FFT cores.** They are external. The FFT scaling, and so the absolute
  power level, depends on how those cores are configured.
* **The 2G64K variant** (2.048 GS/s, 65536 points, 32768 channels, 40-bit
  accumulator, 250 spectra) is not the default. The modules accept
  `N_FFT = 65536`, `SAMPLES_PER_CLK = NUM_FFT = 8` and `ACC_BITS = 40`. The
  variant's second trick is not built: two FPGAs per ADC integrating
  alternately.
* **Not included:** the analog front end (track-and-hold, phase shifter),
  the ADC, the clocking, the network stack and the LCD display.

## Simulating

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/octad_pkg.sv tb/tb_octad_s_top.sv --top-module tb_octad_s_top -o sim
./obj_dir/sim
```

**`tb_octad_s_top`** runs the whole chain at reduced size: 64 points, 4
lanes, 32 channels. It takes under a second. It drives a tone plus noise and
uses `tb/fft_model.sv` in place of the FFT cores. It checks:

* every windowed sample;
* every packet word, against sums formed from the FFT outputs it observes;
* dump spacing, which shows there is no dead time.

It also makes each of these happen at least once: all four windows, a
custom upload, output back-pressure, clipping, an ADC overflow in a header, a
stop and restart, a time load and a change of length.

**`tb_octad_s_full`** runs the top at its defaults: two full 8000-spectrum
dumps, about 4.1 million clocks. It takes about two minutes.

The block testbenches (`tb_adc_decode`, `tb_frame_buffer`, `tb_window_unit`,
`tb_power_detector`, `tb_accumulator`, `tb_gain_controller`,
`tb_data_formatter`, `tb_timestamp_counter`, `tb_control_regs`) each run in
well under a second. They override sizes to stay short.

The code relies on no simulator-specific constructs. Assertions check:

* the lane-count rule;
* the gain controller's queue bound;
* packet framing.
