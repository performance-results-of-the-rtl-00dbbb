# MIZAR: a 64-channel waveform-sampling readout chip with topological trigger, in SystemVerilog

A camera that watches the night sky for the Cherenkov flash of an air shower
has to catch light pulses a few nanoseconds long on hundreds of silicon
photomultiplier (SiPM) pixels. It has to keep the whole waveform around each
pulse, and it must not spend power or link bandwidth on the many flashes that
are only noise. The MIZAR chip reads an 8 x 8 SiPM tile and handles this in
three steps:

* it samples every pixel all the time, at 200 MS/s, into a ring of 256 analog
  memory cells, and converts nothing yet;
* on a threshold crossing it sends a 64-pixel *hitmap* to an FPGA. The FPGA
  decides from the shape of the hit cluster whether the event looks like a
  shower;
* only an accepted event is digitized, by one Wilkinson ADC per memory cell,
  so all samples are converted in parallel. The frames then leave the chip on
  one serial lane.

The memory can be cut into up to eight independent blocks. One event can then
be converted and shipped while the next ones are recorded. This
*derandomization* keeps dead time low.

This repository is a register-transfer model of that chip, built from its
published description. It also contains the FPGA-side hitmap validator, which
closes the trigger loop. The digital logic is synthesizable. The analog part of
each channel (front end, discriminators, sampling capacitors, cell comparators)
is a behavioural model that lets the whole chain be simulated from an input
voltage to the bits on the serial link.

## An event, cycle by cycle

`clk` is the 200 MHz sampling clock (5 ns) and `clk_ser` the 400 MHz serializer
clock. The default configuration has eight 32-cell blocks, 12-bit codes, a
4-sample validation window and a 16-cycle (80 ns) FPGA time-out.

| cycle (clk)          | what happens |
|----------------------|--------------|
| P                    | a channel's low discriminator is first seen high (threshold crossing) |
| P+1                  | that channel's `xing` pulse; its validation window opens |
| P+2                  | `ts_strobe`; the cell written in this cycle is the event's t_S cell |
| P+2 ... P+17         | the sampling block takes t_S and 15 more samples, then freezes; writing moves on to a free block |
| last window closed+1 | `hm_valid` with the high and low hitmaps and `hm_data` (does a block hold the data) |
| +1                   | validator answers `accept` or `reject`; with no answer within 16 cycles the chip times out |
| +1                   | channels cleared, chip re-armed; on accept the block's conversion chain starts |
| +2^N                 | conversion done (4096 cycles = 20.48 us at 12 bits) |
| then                 | 64 frames of 434 bits at 2 bits per `clk_ser` cycle: 13,888 cycles = 34.72 us |

An accepted block stays busy through conversion and readout. The other seven
keep recording. If all eight are busy, sampling stops. A trigger in that state
still produces a hitmap, with `hm_data` low, and no data follows it.

## Two thresholds and the validation window (`channel_trigger`)

Each channel has a low and a high discriminator. A rising low edge marks the
crossing time and starts a counter of `win_len` samples:

* if the high discriminator rises while the window is open, the channel
  reports a **high** hit at once;
* if the window runs out first, it reports a **low** hit;
* a high edge arriving later does not change the result.

The flag is held until the chip closes the event. The controller
(`trigger_ctrl`) waits until no channel has a window open, then sends both
64-bit maps in one cycle. The first crossing of an event is what fixes t_S.

## Which clusters count as a shower (`hitmap_validator`)

The validator takes every pixel in turn as the "main" pixel M. It compares the
hits around M with ten fingerprints, all at once:

| case | pixels (row, col offset from M)        | map used     |
|------|----------------------------------------|--------------|
| 0    | M                                      | high         |
| 1    | M, (0,+1)                              | high or low  |
| 2    | M, (+1,0)                              | high or low  |
| 3    | M, (+1,+1)                             | high or low  |
| 4    | M, (+1,-1)                             | high or low  |
| 5    | M, (0,+1), (+1,+1)                     | low          |
| 6    | M, (0,+1), (+1,0)                      | low          |
| 7    | M, (+1,-1), (+1,0)                     | low          |
| 8    | M, (+1,0), (+1,+1)                     | low          |
| 9    | M, (0,+1), (+1,0), (+1,+1)             | low          |

"Low" means the union of the low and high maps, since a pixel over the high
threshold is also over the low one. Cases 1 to 4 are checked on both maps.

A case matches only if the hit pattern is exactly the fingerprint:

* every fingerprint pixel is hit;
* no other pixel touching the fingerprint (its 8-neighbourhood) is hit;
* pixels outside the tile count as not hit.

So a five-pixel blob matches nothing and is rejected, although it contains
several fingerprints. Any match accepts the event. `case_hit` reports which
cases matched.

A rejected event whose only hit is a single pixel on the tile border raises
`edge_query`. The real system would then look at the neighbouring tile. That
look-up is outside a single chip's view and is not modelled.

In the RTL, the check is a 5 x 5 window per pixel, built with generate loops.
Each case is a pattern mask and a neighbourhood mask, computed at elaboration.
A case matches when `((window ^ pattern) & neighbourhood) == 0`.

Two extra inputs are for testing:

* `force_accept` accepts every hitmap. This is the lab mode that dumps raw data.
* `hold` withholds the answer, which exercises the chip's time-out.

## Analog memory, blocks and derandomization (`buffer_manager`)

All 64 channels write the same cell in the same cycle, so one controller serves
them all. The 256 cells form 8 blocks of 32, 4 of 64, or 1 of 256 (`seg`).
Writing goes round the current sampling block, so the block always holds the
most recent block-length of samples.

On `ts_strobe` the block takes the t_S sample and then half a block more minus
one. After that it freezes. For 32 cells that is 16 samples before t_S, t_S
itself and 15 after, i.e. t_S-80 ns to t_S+75 ns. The frozen block's oldest
cell (`first_cell`) is where the serializer starts.

Each block runs this state machine:

`FREE -> SAMPLING -> POST -> HELD -> CONV -> READQ -> READ -> FREE`

A release (reject or time-out) jumps from HELD to FREE. A decision that arrives
before the freeze is stored and applied at the freeze.

Block *i* uses conversion chain *i*. Converted blocks are queued in order for
the serializer. The two clock domains exchange a four-phase `ro_req`/`ro_ack`
handshake, and a block is freed when `ro_ack` falls.

Changing the segmentation restarts the memory. Any event held at that moment
is lost.

## Conversion (`wilkinson_counter`, `cell_latch_bank`, `analog_channel`)

Every cell has its own comparator. A conversion chain raises the ramp of one
block and counts 0 ... 2^N-1. Each cell of the block latches the running count
in the cycle its comparator fires. A cell that never fires takes full scale. A
conversion therefore always takes 2^N cycles, whatever the signal. N is 8 to 12
and is clamped to that range.

The behavioural model turns the ramp current register into a step per count:
40 nA per code step, 37 uV per 40 nA. That gives:

* step = (`mir_vb` + 1) x 37 uV;
* code = ceil((V_cell - 600 mV) / step).

At the default 320 nA (code 7) and 12 bits, the 870 mV baseline reads about 913,
and the range is 1.2 V.

## The serial frame (`eoc_serializer`)

Channels are sent in order 0 to 63. Each frame is MSB first:

| bits | field |
|------|-------|
| 8    | chip id |
| 6    | channel |
| 16   | event number (accepted events with data) |
| 3    | block |
| 8    | t_S cell |
| 2    | segmentation |
| 4    | resolution N |
| 1    | this channel's high-trigger flag |
| cells x N | samples, oldest first |
| 1    | even parity over the sample bits |
| 1    | end marker, always 1 |

The header totals 48 bits. For 32 cells at 12 bits the frame is
48 + 384 + 2 = 434 bits, or 27,776 bits per event.

Inside, a 64-bit gearbox takes one item per cycle (a 12-bit header chunk, a
sample or the trailer) and gives out two bits per cycle, so the stream has no
gaps. `ser_d[1]` is the first bit of each pair, for a DDR output cell.

The 48 and 434 figures are the published ones. The header's field layout and
the 2-bit trailer are this design's choice.

## Configuration (`spi_config`)

The interface is SPI mode 0 with 24-bit frames: `{write, addr[6:0], data[15:0]}`.
Read data comes back on `miso` in the last 16 bits. `sclk` is oversampled by
`clk`, so it must be at most clk/4.

| address   | register | bits |
|-----------|----------|------|
| 0x00-0x3F | channel PCR | `cal_mode[10]`, `vth_lo[9:5]`, `vth_hi[4:0]` |
| 0x40 | GCR | `adc_bits[10:7]`, `seg[6:5]`, `dc_coupling[4]`, `gain[3:0]` |
| 0x41 | test pulse amplitude (`tp_vb`, mV in the model) | 7:0 |
| 0x42 | ramp current (`mir_vb`, (k+1) x 40 nA) | 3:0 |
| 0x43 / 0x44 | low / high threshold level, mV | 9:0 |
| 0x45 | threshold step, mV | 3:0 |
| 0x46 | test pulse length, samples | 7:0 |
| 0x47 | validation window, samples | 7:0 |
| 0x48 | FPGA time-out, cycles | 7:0 |
| 0x49 | chip id | 7:0 |

Channel thresholds are VTH_GBL - (31 - n) x LSB. So n = 31 sits at the global
level, and lower codes move down one step each.

The reset values are:

* 320 nA ramp current;
* 900 mV threshold levels with a 1 mV step;
* channel codes of 15;
* 12 bits, 32-cell blocks;
* a 4-sample window and an 80 ns time-out.

## Hierarchy

```
mizar_fee                   one front-end board: chip + hitmap validator (top)
  mizar_asic                the chip
    spi_config              registers
    64 x analog_channel     behavioural model: front end, discriminators, cells, comparators
    64 x channel_trigger    two-threshold trigger with validation window
    64 x cell_latch_bank    256 code latches per channel
    trigger_ctrl            event controller, hitmap, FPGA handshake and time-out
    buffer_manager          write pointer, block states, derandomizer, readout queue
    8 x wilkinson_counter   conversion chains
    eoc_serializer          frame builder and 2-bit serializer (clk_ser)
  hitmap_validator          FPGA decision on one hitmap
mizar_pkg                   constants, configuration struct, block state enum
```

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_mizar_fee \
    -y rtl +libext+.sv rtl/mizar_pkg.sv tb/tb_mizar_fee.sv
./obj_dir/Vtb_mizar_fee
```

* `tb_mizar_fee` is the end-to-end test at the default sizes (64 channels,
  256 cells, 8 blocks, 12 bits). It runs in about half a minute. It injects:
  * a cluster for each of the ten cases;
  * rejected single pixels, one inside the tile and one on the edge;
  * an oversized cluster;
  * an event the validator withholds;
  * a forced accept;
  * a burst that fills all eight blocks;
  * a calibration test pulse;
  * runs with 32 cells at 12 bits, 64 cells at 8 bits and 256 cells at 10 bits.

  It decodes every frame and checks every sample against the code predicted
  from the injected waveform. It counts each mechanism (SPI writes, high and
  low triggers, accept, reject, edge query, time-out, forced accept, memory
  full, hitmap-only events, test pulse, each segmentation, 8 and 12 bits, each
  of the ten cases) and fails if one never happened.
* `tb_mizar_asic` drives the chip alone, with the testbench as the FPGA. It
  checks the hitmaps, 2^N conversion cycles, the 13,888-cycle readout, every
  sample, reject and the 16-cycle time-out.
* Block tests: `tb_channel_trigger`, `tb_trigger_ctrl`, `tb_buffer_manager`,
  `tb_wilkinson_counter`, `tb_cell_latch_bank`, `tb_eoc_serializer`,
  `tb_hitmap_validator` (against an independent pattern model), `tb_spi_config`
  and `tb_analog_channel`.

## Where this model departs from the published description, and what it leaves out

* **Threshold relation.** The description gives "VTH_GBL - n x LSB". It also
  says that n = 31 is the global level. These two conflict. The model follows
  the second: VTH_GBL - (31 - n) x LSB.
* **Window around t_S.** 32 samples at 5 ns cannot span both t_S-80 ns and
  t_S+80 ns. The model keeps t_S-80 ns to t_S+75 ns.
* **t_S latency.** The stored t_S is the sample two clocks after the first
  crossing: one clock for the channel trigger, one for the event controller.
  The cycle in which a block freezes writes no cell.
* **Own choices, unspecified in the source:**
  * the hitmap link is parallel (two 64-bit maps and a strobe);
  * the chip handles one event decision at a time;
  * blocks are read out first in, first out;
  * the frame header layout and the parity/end trailer;
  * the SPI frame and register map;
  * the full-scale rule for cells that never fire;
  * latches are modelled as clocked registers.
* **Analog numbers.** The analog model's numbers are all assumptions: the
  870 mV baseline, the 600 mV ramp bottom, 37 uV per 40 nA per count, the gain
  law (g+1)/8, and a test pulse in mV. The measured gain curve, noise, fixed
  pattern noise, the 10-bit threshold DAC linearity and the AC/DC coupling
  behaviour are not modelled. `dc_coupling` is stored but has no effect.
* **Not built:**
  * the SiPMs;
  * pads, LVDS drivers and power domains;
  * the FPGA board and PC;
  * the cross-tile check of an edge pixel (only flagged by `edge_query`);
  * one FPGA serving five chips (here one validator serves one chip).

  A 512-pixel camera is eight `mizar_fee` instances.
* **Clock crossing.** The serializer reads the latch banks of a frozen block
  directly across the two clock domains. Only the request and acknowledge are
  synchronized.
* **Sampling rate.** Running at 100 MHz, as in the bench test-pulse
  measurement, just means a slower `clk`. All counts stay the same.
