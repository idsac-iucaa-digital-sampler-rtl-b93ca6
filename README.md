# IDSAC single-board controller firmware in SystemVerilog

IDSAC (IUCAA Digital Sampler Array Controller) is a CCD controller for
astronomical instruments. It is built from identical Single Board Controllers
(SBCs), each able to run one large CCD with up to four outputs. Each SBC
carries an FPGA that generates the CCD clock waveforms, programs the clock and
bias DACs, and reads four 16-bit, 10 MSPS serial ADCs. The correlated double
sampling that removes the CCD's reset (kTC) noise is done digitally, on ADC
samples, inside the FPGA. The published design reads 0.5 Mpixel/s per
channel with 3 to 5 samples averaged on each of the two levels of a pixel.

This repository holds RTL for that FPGA firmware: everything on one SBC that
is logic. The analog parts (preamplifiers, ADC drivers, clock and bias
drivers), the ADC and DAC chips, the USB controller chip and the backplane
are not logic and are not here. The testbenches model the ADC and DAC chips
in simple behavioural form.

The published description gives the structure: which blocks the FPGA
contains, what they drive, the channel and clock counts, and the rates. It
does not give the interfaces, formats or sequencing details. Every such
detail below is this implementation's own choice, and is marked as such.

## Block structure

```
 host (USB controller, 16-bit word streams)
   |  commands                                   ^ pixel words
   v                                             |
 cmd_decoder --- geometry, tables, codes --+   pixel_packer (4 ch -> FIFO)
   |  start/abort      static DAC writes   |         ^  ^  ^  ^
   v                        |              |         |  |  |  |
 readout_seq                v              |       dcds x4
   |        \           bias_ctrl ---------+--> bias / clock-rail DACs (SPI)
   v         v                             |         ^
 parallel_clock_ctrl   waveform_gen -------+--> serial clock switches,
   | SPI + LDAC          |  ref/sig windows      HV clock, filter reset
   v                     v  (as tags)
 parallel clock DAC    adc_serial_rx x4 <-- ADC serial data
```

| Module | Role |
|---|---|
| `idsac_sbc` | Top level: the firmware of one SBC |
| `adc_serial_rx` | Conversion strobe and deserialiser for one ADC, tags each sample |
| `dcds` | Digital correlated double sampling for one channel |
| `waveform_gen` | Plays the per-pixel timing table |
| `readout_seq` | Row/pixel loop with region of interest, prescan and overscan |
| `parallel_clock_ctrl` | Tri-level parallel clocks through a DAC with LDAC |
| `bias_ctrl` | Shadow registers and writes for the bias and clock-rail DACs |
| `spi_dac_master` | 24-bit serial DAC write port (used by the two above) |
| `pixel_packer` + `sync_fifo` | Merges four channels into one buffered word stream |
| `cmd_decoder` | Host command parser and configuration registers |
| `idsac_pkg` | Shared constants, types, opcodes, register map |

## Reading one pixel

This is the core of the design and the least obvious part.

### The pixel timing table

A pixel period consists of fixed steps:
1. Pulse the reset gate to reset the output node.
2. Let the video settle and sample the reset (reference) level.
3. Open the summing well so the pixel's charge reaches the output node.
4. Settle again and sample the signal level.
5. Move the serial register on by one pixel.

The controller's ten serial clocks do this. They are serial register phases,
summing well and reset gate. Each clock driver switches between two
DAC-set rails through an analog switch. The FPGA drives only the switch, so
the whole pattern is a set of logic levels over time.

`waveform_gen` stores the pattern as a table of up to 16 entries. Each entry
holds a 16-bit duration `dur` and 16 output bits. Entry *i* is held for
`dur`+1 system clocks. The output bits are:

| Bit | Drives |
|---|---|
| 9..0 | the ten serial clock driver switches (which bit is which phase is up to the table) |
| 10 | the high-voltage (electron-multiplying) clock |
| 11 | the reset switch of the video anti-aliasing filter |
| 12 | DCDS reference window |
| 13 | DCDS signal window |
| 15..14 | unused |

`readout_seq` starts the table once per pixel. The next pixel starts in the
same clock that the previous one reports `done`. One pixel therefore lasts
the sum of (`dur`+1) over the entries, plus one clock.

Pixels outside the region of interest are still clocked, so the charge still
moves. For them the sequencer lowers `sample_en`, and the two window bits are
forced low: nothing is digitised.

### The sampling windows travel with the samples

The ADCs convert continuously. `adc_serial_rx` raises a one-clock conversion
strobe every 16 system clocks: 10 MSPS at the default 160 MHz. It receives
each result one bit per clock, MSB first, with a frame marker. Each result
comes back one conversion late.

A sample must not be filed as reference or signal by when its data arrives.
That would make the result depend on the ADC's pipeline delay. Instead, the
receiver samples the two window bits at the conversion strobe. It delays them
through a small pipeline of `LATENCY` conversions and attaches them to the
word as a tag. A sample tagged `ref` was converted while the reference window
was open, whatever its arrival time.

With a window of 16·*n* clocks, exactly *n* conversion strobes fall inside
it, at any phase. So the number of samples per level is set only by the
window lengths in the table. The published measurements use *n* = 3, 4 and 5.

### The DCDS arithmetic

`dcds` adds the tagged samples into a reference group and a signal group. It
closes the pixel at the first untagged (or reference-tagged) sample that
follows a signal sample. 23 clocks later it outputs

    pixel = floor(sum_ref / n_ref) - floor(sum_sig / n_sig)

clamped at 0. The charge lowers the output voltage, so the signal level lies
below the reset level. An empty group counts as 0. More than 15 samples in a
group (`MAX_SAMP`) are dropped, and the top level flags this as `dcds_ovf`.

The averaging is a plain integer divide by the group size. It is done by a
bit-serial restoring divider, one quotient bit per clock (20 clocks for a
20-bit sum). A single-cycle 20-bit divider would not close timing at
160 MHz. The shortest pixel has two samples, which take 32 clocks. If a
pixel closes before the previous one has been divided, the earlier pixel is
lost and the later one is flagged on `dcds_ovf`. The published
description says only that the two levels are sampled digitally and
differenced. The exact averaging and rounding are this design's choice.

### Default timing

At 160 MHz, 0.5 Mpixel/s is 320 clocks per pixel, or 20 ADC samples. The
end-to-end testbench uses this table (durations in clocks):

| Entry | Clocks | Content |
|---|---|---|
| 0 | 32 | reset gate, filter reset |
| 1 | 32 | settle |
| 2 | 48 | reference window (3 samples) |
| 3 | 48 | summing well dump |
| 4 | 32 | settle |
| 5 | 48 | signal window (3 samples) |
| 6 | 79 | rest of the period, HV clock |
| gap | 1 | between pixels |

Because the rate is set entirely by the table, other operating points need no
hardware change:
* 350 kpixel/s takes a 457-clock period (350.1 kpixel/s; 160 MHz does not
  divide evenly).
* 1 Mpixel/s takes a 160-clock period.
* 3, 4 or 5 samples per level take windows of 48, 64 or 80 clocks.

## Rows, region of interest and the tri-level parallel clocks

### Row sequence

For each row, `readout_seq` does two things in turn:
1. It steps the ten parallel clocks through `n_pstates` states from an
   8-entry table. Each state is held for its `dwell` clocks after it has
   been applied. This moves the image down one row into the serial register.
2. It clocks out every pixel of the row:
   `cols_skip + cols_read + cols_over` pixels.

A pixel is digitised only if both of these hold:
* its row index is `rows_skip` or more;
* its column index is `cols_skip` or more.

This gives an arbitrary region of interest. Overscan is `cols_over` pixels
clocked past the end of the region. Dark prescan columns are read by
including them in the digitised range. Skipped rows are transferred and
clocked out without sampling. There is no fast dump and no binning, since
the published design describes neither.

### How parallel clocks are driven

The parallel clocks are slow. The controller therefore drives each one from a
single DAC channel and changes its state by rewriting the DAC, not with an
analog switch. This halves the number of DACs per clock. The DAC holds new
codes in input registers until an LDAC strobe, so all clocks change at the
same instant. Any DAC code can be used, so a third level comes for free;
this allows slow tri-level clocking, which improves charge transfer.

`parallel_clock_ctrl` receives a state with a level for each clock: low, mid
or high. It writes only the channels whose level changed (all channels on the
first state after reset). Each write uses the code the host set for that
clock and level. It then pulls LDAC low for 4 clocks.

At the default SPI speed (`SPI_DIV` = 4) one channel write takes 201 clocks.
A state that changes three clocks therefore takes about 600 clocks (3.8 µs)
before its dwell time starts.

## DAC programming

`bias_ctrl` holds 39 static DAC settings:

| Channels | What they set |
|---|---|
| 0–16 | the 17 bias outputs: 12 unipolar, 4 bipolar and one high-voltage negative bias |
| 17–36 | the two rails of each of the 10 serial clocks |
| 37–38 | the two rails of the high-voltage clock |

A host write updates a shadow register and marks the channel pending. A
refresh command marks all 39 pending. Pending channels are sent lowest first.

Both DAC buses use one frame format: CS_N low, then 24 bits MSB first,
{address[7:0], code[15:0]}, with data taken on the SCLK rising edge. The
published design names no DAC part, so this format is an assumption. Adapt
`spi_dac_master` to the real part.

## Host commands

The host link is a 16-bit valid/ready stream in each direction. This is
the FPGA side of the USB 2.0 controller chip, whose real bus is not given.
Every command is two words: `{opcode[3:0], address[11:0]}`, then `data[15:0]`.

| Opcode | Meaning |
|---|---|
| 1 | write register |
| 2 | start a frame |
| 3 | abort |
| 4 | resend all static DACs |

Any other opcode raises `cmd_err`.

| Address (hex) | Register |
|---|---|
| 000+2i / 001+2i | waveform entry i: duration, then bits (the entry is committed when its bits word arrives) |
| 040+4j / 041+4j / 042+4j | parallel state j: levels of clocks 7..0, levels of clocks 9..8, dwell |
| 070 … 077 | rows_skip, rows_read, cols_skip, cols_read, cols_over, n_pstates, n_wf, idle_bits |
| 080+4c+l | DAC code of parallel clock c at level l (0 low, 1 mid, 2 high) |
| 100+k | static DAC channel k |

Pixel words go to the host in the order row, column, then channel 0 to 3
within each pixel. They pass through a 1024-word FIFO. If the host falls a
whole pixel period behind with the FIFO full, data is lost and the sticky
`fifo_ovf` flag rises. The next start clears it.

The configuration registers can be written at any time. Writing them during
a frame takes effect immediately, with no protection.

## Parameters and sizes

| Where | Parameter | Default | Origin |
|---|---|---|---|
| `idsac_pkg` | channels, ADC bits | 4, 16 | published |
| `idsac_pkg` | serial / parallel clocks, biases | 10 / 10 / 17 | published |
| `idsac_pkg` | system clock | 160 MHz | assumed (one ADC bit per clock) |
| `idsac_sbc` | `ADC_DIV` | 16 | 10 MSPS is published, the ratio is assumed |
| `idsac_sbc` | `ADC_LATENCY`, `SPI_DIV`, `FIFO_DEPTH` | 1, 4, 1024 | assumed |
| `waveform_gen` | `N_ENTRIES` | 16 | assumed |
| `readout_seq` | `N_PSTATES` | 8 | assumed |
| `dcds` | `MAX_SAMP` | 15 | assumed (published use: 3–5) |

Geometry registers are 16 bits, so a 2k × 4k detector fits. The frame is
streamed, not stored. At four channels × 0.5 Mpixel/s × 2 bytes the host
link must sustain 4 MB/s.

## Departures from the published design, and gaps

* **Rate.** The board figure quotes a DCDS throughput of 1 MSPS; the text
  quotes 0.5 Mpixel/s per channel. The default table follows the text, and a
  160-clock table reaches 1 Mpixel/s.
* **Interfaces and formats.** All of these are this implementation's own:
  * the ADC serial format and latency;
  * the DAC frame;
  * the host word stream, command set and register map;
  * the table formats;
  * the 160 MHz clock.
* **Pixel close.** The pixel closes itself from the sample tags; there is no
  explicit end-of-pixel strobe.
* **Unsupported operation.** Binning, fast row dump and exposure or shutter
  control are not implemented; the published description mentions none of
  them.
* **Not logic, so not here.** Dummy-output subtraction, the ADC common-mode
  loop and all noise behaviour are analog.
* **Backplane.** One SBC is implemented. The five-SBC backplane has no logic
  of its own; each SBC is independent.

## Simulating

Every testbench is self-checking. Each ends with one line,
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/idsac_pkg.sv tb/tb_idsac_sbc.sv --top-module tb_idsac_sbc -o sim
./obj_dir/sim
```

Replace `tb_idsac_sbc` with any other testbench name.

| Testbench | What it establishes |
|---|---|
| `tb_idsac_sbc` | End to end at default parameters. The host configures everything. A CCD output model behind four ADC models produces known pixel values. It checks the region-of-interest image word for word, the 320-clock pixel period, the tri-level DAC codes after each LDAC, the biases and refresh, cmd_err, abort and FIFO overflow. Every mechanism is counted and must occur. |
| `tb_workloads` | 500 kpixel/s with 3 samples; 350 kpixel/s with 3, 4 and 5 samples; 1 Mpixel/s; one full 2048-column row with 50 prescan and 16 overscan columns. |
| `tb_adc_serial_rx` | Words, tags and the 10 MSPS rate against the ADC model. |
| `tb_dcds` | Exact averages and difference, clamping, empty groups, overflow, 23-clock latency, overrun. |
| `tb_waveform_gen` | Output of every clock against the table, window gating, done timing, the 320-clock period. |
| `tb_spi_dac_master` | Frames received intact, SCLK low at CS edges, frame period. |
| `tb_parallel_clock_ctrl` | Outputs move only at LDAC, only changed channels are written, LDAC width. |
| `tb_bias_ctrl` | Writes, bursts, rewrite during send, refresh order. |
| `tb_readout_seq` | State order, dwell times, pixel counts and sampling mask, abort. |
| `tb_pixel_packer` | Order under back-pressure; overflow and clear. |
| `tb_cmd_decoder` | Every register, command pulses, error cases. |

Behavioural models are used only in testbenches:
* `tb/adc_model.sv`: serial ADC with one conversion of latency.
* `tb/dac_model.sv`: SPI DAC with input and output registers and LDAC.

The RTL contains assertions for its bus rules:
* SCLK only inside a frame;
* LDAC never during a frame;
* parallel-state requests held until taken;
* FIFO occupancy bounds;
* table length.

Running with `--assert` checks them.

The design lints cleanly under Verilator `-Wall` apart from unused-signal
and unused-constant notes, and elaborates in Yosys through its slang front
end. No synthesis to a specific FPGA has been done. The logic is small:
about 2,900 flip-flops plus the 16 Kbit FIFO and the 512-bit waveform table.
