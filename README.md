# Guided-wave pipe monitoring node: FPGA design

This design is a pipe-monitoring node that uses torsional T(0,1) guided waves, built for a single
Artix-7 class FPGA. It has four jobs:

- It fires a ring of transmitter transducers with a 5-cycle Hanning-windowed 75 kHz burst.
- It records a ring of eight receivers, 400 mm further along the pipe, one channel at a time.
  Each record averages 10 shots.
- It sends the averaged traces to a host computer over a 230400-baud serial link.
- It computes a damage-index (DI) map of the unrolled pipe wall from decimated baseline and
  damage data sets, and keeps the map in the external SRAM for the host to read back.

In the published system, a soft processor runs the schedule and computes the map in C. It takes
about 24 minutes. Here both jobs are done in hardware: a command sequencer replaces the
processor, and a pipelined engine computes the map. With the default sizes the engine produces
the 180 x 400 pixel map in 400 million clocks, which is 4.0 s at 100 MHz.

All logic runs on one 100 MHz clock with a synchronous active-low reset. Every size below is a
parameter of the top level, `shm_top`, with the published value as its default wherever one was
given.

## Signal chain and data flow

```
 host --serial--> uart --> shm_ctrl --+--> dac_ip --> DAC7821 --> Tx ring
                   ^                  |
                   |                  +--> adc_ip <-- MAX1426 <-- switch <-- Rx ring (8)
                   |                  |      (averaging buffer, 8000 x 16 bit)
                   +------------------+
                                      +--> di_engine <-- two data-set RAMs (baseline, damage)
                                      |                    ^ ld_* upload port
                                      +--> ext_mem_if --> 512 KB SRAM (DI map)
```

A measurement has four steps, the same as in the published flow:

1. **Record.** For each receiver, the host sends an acquire command. The node fires 10 shots
   and returns the 6000 averaged samples (600 µs at 10 Msps). This is done once with the pipe
   intact (baseline) and once in the condition under test.
2. **Decimate and upload.** The host decimates every trace by 10, giving 600 samples at 1 Msps.
   The whole data set is 2 × 8 × 600 = 9600 samples. The host writes it into the two data-set
   RAMs through the `ld_*` port. That port stands in for the debugger upload path used by the
   published system.
3. **Compute.** The host sends the run command. The engine computes every pixel and writes it to
   the SRAM. The node answers 0xA5 when the map is complete.
4. **Read back.** The host sends the read command. The node streams out all 72 000 pixels.

## Excitation (`dac_ip`)

The burst is

H(t) = 0.5 (1 − cos(2πft/5)) sin(2πft), for 0 ≤ t < 5/f, with f = 75 kHz.

It is stored in a look-up table of 12-bit offset-binary codes: code = 2048 + round(2047·H). The
table is computed at elaboration from the formula. At a 10 MHz update rate it holds
round(5 · 10 MHz / 75 kHz) = 667 entries, so changing the frequency, the cycle count or the rate
rebuilds it.

- The DAC is updated on the same sample tick that clocks the ADC. Excitation and record
  therefore start on the same tick.
- Code k is put on the bus at the k-th tick after the start.
- Each code is written with a write strobe: CS and WR go low for 4 clocks, starting one clock
  after the data changes. The DAC latches on the rising WR edge while the data is still stable.
- After the last table entry, one mid-scale code returns the output to 0 V, and `done` pulses.
- A burst is 668 writes, 66.8 µs long.

## Acquisition and averaging (`adc_ip`)

The converter clock is the system clock divided by 10. It is high for the first half of each
period, giving 10 Msps. The same divider makes the one-clock sample tick that is shared with the
DAC.

- The receiver switch select follows the requested channel only between shots, so a shot never
  mixes channels.
- A converter with a pipeline delay of ADC_LAT conversions is assumed (6 by default). A shot
  skips the first ADC_LAT + 1 words it sees. Buffer word *i* then holds the conversion made at
  the *i*-th tick after the shot started.
- Averaging happens in place in an 8000-word × 16-bit block RAM. The depth is the published
  800 µs of storage at 10 Msps.
  - The first shot of a measurement writes each sample.
  - Every later shot adds to the stored word by read-modify-write, one sample per tick.
  - The read port returns the stored sum divided by the number of shots (10).
  - Ten 10-bit samples sum to at most 10 230, well inside 16 bits.
- A shot lasts REC_SAMPLES + ADC_LAT + 1 = 6007 ticks (60.07 µs). Shots of one measurement
  follow each other at exactly that spacing, so 10 shots take about 0.6 ms.

## Host link (`uart`, `uart_tx`, `uart_rx`)

The link is 8N1 at 230400 baud. The bit period is round(100 MHz / 230400) = 434 clocks, a rate
error of 0.01 %.

- The receiver input passes through two synchronising flip-flops, and each bit is sampled at
  mid-bit.
- A frame whose stop bit is low is dropped and flagged on `uart_err`.
- The transmitter uses a valid/ready handshake.

The command set uses single bytes:

| Byte | Action | Reply |
|------|--------|-------|
| 0x10 + ch | record receiver ch (10 averaged shots) | 6000 samples, 2 bytes each, low byte first |
| 0x20 | compute the DI map into SRAM | 0xA5 when done |
| 0x30 | read the map | 72 000 pixels, 4 bytes each, low byte first, row by row |
| 0x40 | system information | N_CH, N_AVG, then REC_SAMPLES as 2 bytes, low byte first |

Other bytes, and bytes that arrive while a command is running, are ignored.

At 230400 baud, one trace takes 0.52 s to send and the full map 12.5 s. The serial link, not the
computation, limits a full measurement cycle.

## Data-set memory (`bram`)

There are two simple dual-port RAMs of N_CH × TRACE_LEN = 4800 words of 16 bits, one for
baseline and one for damage.

- Word *n* of receiver *m* sits at address m·600 + n.
- Both RAMs are read at the same address, so the engine gets a baseline/damage pair every clock.
- The read is registered: one clock of latency, and old data on a same-address collision.

## Damage-index engine (`di_engine`, `isqrt`)

The pipe section between the rings is unrolled into a sheet. Its height is the circumference,
360 mm, and its length is the ring separation, 400 mm.

The pixel grid is 180 rows × 400 columns:

- Row *r* is at x = 2r mm around the pipe.
- Column *c* is at z = c mm along it.
- The 2 mm × 1 mm pitch keeps the map within the 512 KB SRAM at 32 bits per pixel. A 1 mm × 1 mm
  grid would need 579 KB.
- Receiver *m* sits at x_m = 45m mm on the receiver ring.

For each pixel and each receiver m, the engine does the following:

1. The distance to the transmitter ring is z, because all transmitters fire together.
2. The distance to the receiver is d_m = sqrt((x − x_m)² + (z − 400)²). It is not wrapped around
   the circumference.
3. The window start is sn_m = (z + d_m) · f_s / C, with f_s = 1 Msps and C = 3130 m/s.
4. It accumulates Δ[k] += bs_m[sn_m + k] − dm_m[sn_m + k] for k = 0 … 599.

After the last receiver, the pixel value is DI = Σ_k Δ[k]², saturated at 2³² − 1.

Summing the differences gives the same result as the published order (sum each condition's
windows, then subtract), because the operation is linear.

**Fixed point.** Positions are whole millimetres.

- A bit-serial square root computes the distance as d16 = floor(sqrt(256 d²)), in 1/16 mm. Its
  28-bit input takes 14 clocks.
- The window start is sn = ((16z + d16)·K + 2¹⁹) >> 20, with K = round(65536 · f_s / (1000 · C))
  = 20938. This rounds to the nearest sample.
- Window samples that fall past the end of a trace count as zero. The traces are 600 samples
  long, so every 600-sample window reaches past the end: in effect each window runs from its
  start sample to the end of the trace.

**Timing.** For each receiver the engine spends 19 clocks on the distance and the window start
(14 of them in the square root), then 600 clocks reading sample pairs. After the last receiver it
spends 600 clocks summing squares and 1 clock offering the pixel. The total is 8 · 619 + 601 =
5553 clocks per pixel.

**Reading the map.** Because every window runs to the end of the trace, a window that opens a
little early still holds the whole defect echo. The map is therefore bright along a streak in z
through the defect, and sharper around the circumference, where the receivers' window starts
disagree quickly.

Each pixel is offered with a valid/ready handshake at address row·400 + col. The SRAM write of a
pixel (20 clocks) overlaps the computation of the next, so the engine never waits.

## External memory (`ext_mem_if`)

The board's SRAM is 512 K × 8 and asynchronous. The interface turns each 32-bit word request into
four byte accesses, little-endian: byte *b* of word *w* is at byte address 4w + b.

- A byte write sets up address and data for one clock, holds WE low for 3 clocks, and keeps
  address and data for one more clock.
- A byte read holds OE low for 3 clocks and samples on the last one.
- A word write takes 20 clocks and a word read 16.
- Chip enable stays low through a word access.
- WE and OE are never low together.
- The data bus is brought out as separate in, out and enable signals for an external tri-state
  pad.

## Sequencer (`shm_ctrl`)

`shm_ctrl` decodes the commands and owns the schedule.

- **Acquire.** It routes the channel, issues 10 shot starts (the first one flagged), then reads
  the averaged buffer out byte by byte into the transmitter.
- **Run.** It starts the engine and passes the engine's pixel handshake straight to the memory
  interface. It sends 0xA5 when the engine reports done.
- **Read.** It reads each word from SRAM and sends its four bytes.

Only one user drives the memory port at a time. An assertion checks this, and others check that each
DAC strobe ends before the next update, the ADC start rule, SRAM strobe exclusion and engine output stability.

## Size and cost

Synthesis of the default top gives about 630 cells and 662 flip-flop bits, with no latches.

Memory totals about 315 kbit:

- the averaging buffer, 8000 × 16 bit = 128 kbit
- the two data-set banks, 2 × 4800 × 16 bit = 154 kbit
- the engine's window accumulator, 600 words of 21 bits (21 kbit once rounded to 1024 words)
- the excitation table, 667 codes of 12 bits (12 kbit once rounded to 1024 words)

This is about a sixth of the device's 1.8 Mbit of block RAM. The published processor system used
35.5 of 50 BRAM tiles, 4276 flip-flops and 5314 LUTs.

The datapath has two multipliers: one for the window start and one squarer for the window sums.

## How it was verified

Each block has a self-checking testbench:

- **DAC.** The burst codes are compared with the formula, and the tick count is checked.
- **ADC.** An ADC model with a pipeline delay is used. Every averaged word is checked, along with
  the shot length and the switch select.
- **Serial link.** Bit time, data, framing errors and loopback are checked.
- **RAM and SRAM interface.** Data, byte placement, clocks per access and the SRAM protocol are
  checked.
- **Engine.** Pixels are compared against a reference model written with real arithmetic.
  Windows that run past the trace end, DI saturation, backpressure and the clocks per pixel are
  all covered.
- **Sequencer.** It is tested against models of its neighbours at their handshakes.

The system test at reduced size (2 receivers, a 3 × 4 map) runs the whole flow over the serial
line: framing-error rejection, the system-information reply, acquisition of both conditions, upload, run and read-back. It
counts every mechanism: shots, averaged shots, channel switches, serial traffic, uploads, pixel
writes, SRAM reads and flagged frames.

The full-size test runs the default top, which takes about five minutes of simulation:

- It checks one complete 6000-sample acquisition.
- It uploads a synthetic data set with a point scatterer at x = 90 mm, z = 200 mm.
- It computes the full map. This takes 399 819 914 clocks, 5553 per pixel.
- It compares all 72 000 pixels with the reference.
- The brightest pixel is at x = 88 mm, z = 193 mm. The defect pixel is equally bright, which is
  the streak along z described above.

## Simulating and changing it

Every testbench builds with plain verilator from the repository root. The packages go first:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/shm_pkg.sv tb/di_ref_pkg.sv tb/tb_shm_top.sv --top-module tb_shm_top
./obj_dir/Vtb_shm_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. The block tests and the reduced
system test (`tb_shm_top`) each run in well under a second. The full-size test (`tb_shm_full`)
takes a few minutes.

The sizes are parameters of `shm_top`, and their defaults live in `shm_pkg`. Some derived values
are computed at elaboration, so changing the parameters rebuilds them:

- the burst table
- the square-root width
- the rate constant K
- all address widths

The testbenches read the same parameters.

The reference model for the DI map (`tb/di_ref_pkg.sv`) uses real arithmetic for the square root
and K. It is the quickest place to check what a change to the fixed-point definition does.

## Differences from the published system

- **Window length.** The published algorithm takes a 600-sample window, t[sn : sn + 600], on
  600-sample decimated traces. It does not say what happens past the trace end. Here those
  samples count as zero, so a window runs from its start to the end of the trace, as the
  published method illustration draws it. Reading the 600 as samples at the full 10 Msps rate
  (60 decimated samples) is the other possible interpretation. It is one parameter change
  (WINDOW = 60), and it makes the map about 4.5 times faster to compute (1233 instead of 5553
  clocks per pixel).
- **Grid.** The published text does not give the pixel grid. 180 × 400 at 2 mm × 1 mm is this
  design's choice. Receiver positions are taken as evenly spaced from x = 0, and distances do not
  wrap around the pipe.
- **No processor.** A hardware sequencer replaces the soft processor, its caches, its
  interconnect and the shared BRAM. The command bytes and reply format are this design's own.
  Decimation stays on the host, as published.
- **Off-chip.** The analog front end (amplifiers, switches, DAC, ADC), the USB-UART bridge and
  the SRAM are outside the FPGA. They appear here only as pins. The debugger upload is replaced
  by the `ld_*` port.
- **Channel count.** The 16-receiver simulation data set does not fit the 8-channel node without
  changing N_CH. The 200 µs low-reflecting data sets fit, as shorter traces.
- **Assumed timings.** The converter latency (6 conversions), the DAC strobe width and the SRAM
  wait states are assumptions about the parts, not published figures.
