# A 32 × 32 digital SiPM with per-quadrant time stamping

This is RTL for a monolithic digital silicon photomultiplier (dSiPM) imager.
It has 1024 pixels at 70 µm pitch, and each pixel holds four single-photon
avalanche diodes (SPADs). The chip is built for frame-based photon detection
at 3 MHz. In every frame it delivers two things:

- the complete hit map: which pixels fired, or how often, up to three times;
- for each of the four 16 × 16 quadrants, the arrival time of the first photon.
  The time has a resolution below 100 ps and is tagged with a 40-bit frame number.

All of this leaves the chip continuously over five serial links at
816 Mbit/s each, about 4 Gbit/s in total. Readout never stops acquisition:
while frame *n* is being acquired, frame *n − 1* is being shifted out.

The digital part is synthesizable SystemVerilog. The analog parts are
behavioural models that can be simulated:

- SPAD quenching front end
- delay-locked loop (DLL) of the TDC
- LVDS receivers and transmitters

The top module `dsipm_ic` is the whole chip at its real size. It is simulated
end to end with plain Verilator.

## Block structure

```
                 SYSTEM CLK 408 MHz, SHUTTER, FRAME CLK 3 MHz, FRAME_RST, READ
                                 (LVDS receivers)
                                        │
 SCL/SDA/GL_RST ─► init register ─► address decoder ─► 32 word lines
                   │ TDC_cntr, Valid_cntr, Set_2bit, 32 bit lines
                   ▼
   ┌──────────────────────── quadrant (× 4) ─────────────────────────┐
   │ 16×16 pixels: front end → mask SRAM → 2-bit counter → row chain │
   │     │ row wired-ORs R<0:15>             │ 16 row streams        │
   │     ├─► validation tree ─► valid        └─► 16:1 MUX ─► TX ──────┼─► HIT MAP Q<n>
   │     └─► OR ─► TDC (DLL + latches + encoder + coarse counter)     │
   │                 └─► FC latch ◄── 40-bit frame counter (global)   │
   │     {valid, FC, coarse, fine} ─► time serializer ────────────────┼─┐
   └──────────────────────────────────────────────────────────────────┘ │
                                      4:1 TIME MUX ◄────────────────────┘ ─► TX ─► TIME
   test circuits:  stand-alone TDC (own DLL)      RX ─► TX chain
```

A clock divider gives the multiplexers their slower phases. It produces
shift enables, not separate clocks, so the whole digital part runs on the
system clock. The only exceptions are the pixel counters, which count
front-end pulses, and the frame counter, which counts FRAME CLK.

## One frame

A frame lasts 136 system clocks (408 MHz / 136 = 3 MHz). Two control
inputs frame it:

- **FRAME_RST** (active low). While it is low, the hit counters, the TDC
  trigger flip-flop, the coarse counter and the valid bit are cleared.
  **Its rising edge opens the acquisition window.**
- **READ**. While it is high, pixels count and the TDC can trigger.
  **Its falling edge closes the window.** While READ is low, every pixel
  counter is copied into its serializer stage, and each quadrant's time word
  into its time serializer. When READ goes high again the next window runs.
  At the same time the stored data are shifted out, so the data of window *n*
  appear on the links during window *n + 1*.

A typical frame is: READ low for two clocks to load, then READ high, then a
short FRAME_RST low pulse to open the new window. The chip-level testbench
uses a pulse of a quarter clock. Time stamps count from the first clock edge
after that pulse.

**1-bit mode** (`Set_2bit` = 0). The pixel counter acts as a one-bit
buffer: "hit at least once". One window equals one frame.

**2-bit mode** (`Set_2bit` = 1). The counter counts 0…3 and saturates at 3.
A hit map is then 512 bits per quadrant, more than one frame can drain, so
each window spans two frame periods. READ stays high for both, and FRAME_RST
is pulsed only every second frame. The mode can be switched between windows
through the configuration register. The data of the window in which the
switch happens is read in the new format.

The front end of each pixel has a dead time of about 22 ns, set on the
chip by a bias voltage. Photons arriving during that time are lost, both in
the count and for the wired-OR.

## Time stamping

Every pixel of a quadrant drives its row's wired-OR line. The OR of the
16 row lines, gated by READ, is the quadrant trigger. Only the first hit
after FRAME_RST matters. Its rising edge sets a trigger flip-flop, which
then does three things:

1. It closes 32 latches on the DLL outputs. The DLL is locked to the system
   clock, so its 32 taps split one 2451 ps period into 32 bins of 76.6 ps.
   The latched pattern is a thermometer code: a run of ones ending at the
   current phase. A 32-to-5 encoder finds the end of the run (lowest *i*
   with tap *i* high and tap *i*+1 low). That is the **fine** value.
2. It stops the 7-bit **coarse** counter. The counter counts reference
   clock periods from the opening of the window.
3. It closes the **FC latch**, which freezes the global 40-bit frame counter.

With E1 the first reference clock edge after FRAME_RST rises, a trigger at

    t = E1 + (coarse − 1) · T + fine · T/32 + (0 … T/32)

gives the 12-bit stamp `coarse · 32 + fine`. The range is
2^7 · 2451 ps = 313.7 ns, nearly the whole frame. A trigger within about
one bin of a clock edge can pair a fine value and a coarse value from
neighbouring periods. The chip has no correction for this, and neither
does this RTL.

The frame counter counts FRAME CLK while SHUTTER is high, and SHUTTER low
clears it. 2^40 frames at 3 MHz last about 102 hours. SHUTTER low also
stops the coarse counters, so SHUTTER marks the start of a measurement.

### Validation tree

Dark counts usually fire one pixel alone, while real light pulses tend to
fire a cluster. The validation logic sees the 16 row lines R<0:15> and
combines them in a binary tree of four levels:

- level 0 gates R0·R1, R2·R3, …;
- level 1 gates neighbouring results of level 0;
- and so on, down to one bit.

Every gate of level *s* is an AND when `Valid_cntr[s]` = 1 and an OR when it
is 0. All-OR accepts any hit. Setting only level 0 to AND asks for two
adjacent rows (a pair 2k/2k+1) firing at the same time. All-AND needs every
row to fire. The tree is combinational. The quadrant samples its output on
the system clock during the window and holds a 1 until the next
FRAME_RST. Because the row lines stay high for the front-end dead time, hits
whose pulses overlap, that is hits less than about 22 ns apart, count as
simultaneous.

## Serial links

Both link types send two bits per system clock: one while the clock is high,
one while it is low. That is 816 Mbit/s. The bit for each half is chosen
from a pair registered on the rising edge, so the link is glitch-free
between edges.

**TIME link** (one per chip). Each quadrant's word is 53 bits, MSB first:

| bits   | 52    | 51:12              | 11:5         | 4:0        |
|--------|-------|--------------------|--------------|------------|
| field  | valid | frame number (40)  | coarse (7)   | fine (5)   |

The four quadrant serializers shift once every two clocks. The link
carries `q0 b52, q1 b52, q2 b52, q3 b52, q0 b51, …`, so 212 bits take 106
clocks. A quadrant that did not trigger sends valid = 0. Its coarse counter
kept running and its FC latch stayed open, so the time fields then carry no
meaning. Such a quadrant is recognised by its empty hit map.

**HIT MAP links** (one per quadrant). Each of the 16 rows is a shift chain
through its pixels. Column 15 leaves first; in 2-bit mode the low count bit
precedes the high one. The 16:1 multiplexer sends the current bit of rows
0,1 in the first clock, rows 2,3 in the next, and so on. After eight clocks
every chain shifts once. The link order is
`r0 p0, r1 p0, …, r15 p0, r0 p1, …`, where *p* counts bits along the chain.
A 1-bit hit map (256 bits) takes 128 clocks of the 136 in a frame. A 2-bit
map (512 bits) takes 256 clocks of the 272 in a two-frame window.

Clock budgets at the default sizes:

| stream                  | bits          | clocks | available |
|-------------------------|---------------|--------|-----------|
| time, 4 quadrants       | 4 × 53 = 212  | 106    | 136       |
| hit map, 1-bit mode     | 256           | 128    | 136       |
| hit map, 2-bit mode     | 512           | 256    | 272       |

Both the clock divider and the serial streams restart from phase 0 at the
first clock after READ rises, so a receiver can align on READ.

## Configuration and pixel masking

The initialization register is a 45-bit shift register. It takes SDA on the
rising edges of SCL, MSB first. After every 45th bit the whole word is copied
to the outputs at once. GL_RST high clears it: 1-bit mode, all-OR validation,
no word line active. Word layout:

| bits  | 44:43      | 42:39      | 38       | 37    | 36:32    | 31:0       |
|-------|------------|------------|----------|-------|----------|------------|
| field | TDC_cntr   | Valid_cntr | Set_2bit | WL_EN | row addr | bit lines  |

Each pixel's mask is a one-bit SRAM cell, and 1 switches the pixel off. A
cell takes its bit line value while its word line is high and the bit line
pair is complementary. The row address (0…31) selects one of 32 word lines
through the address decoder. Rows 0–15 belong to quadrants 0 and 1, rows
16–31 to quadrants 2 and 3. Bit line *c* feeds chip column *c*.

All 45 bits change at once when a word is taken. Switching the word line
and the data together could therefore write the old data into the new row.
A row is written with three words that differ only in WL_EN: first 0, then
1, then 0, all with the same address and data. A full mask load is
32 × 3 = 96 words.

## Analog parts: what the models do

- **Pixel front end** (`spad_frontend`). A rising edge on any of the four
  SPAD inputs of an unmasked pixel raises `Out` after 500 ps, for 22 ns.
  Edges during that time are ignored.
- **DLL** (`tdc_dll`). An ideal, already-locked delay line: 32 taps,
  each one bin (T/32) later than the previous. Phase detector, charge pump,
  loop filter and the calibration switches are not modelled, and `TDC_cntr`
  has no effect. A real chip's bins vary: the silicon showed about
  94 ps at 408 MHz instead of 76.5 ps. Nonlinearity is not modelled.
- **LVDS receiver** (`lvds_rx`). Follows the sign of In+ − In− after
  200 ps. With equal inputs it holds its last value, the hysteresis of the
  Schmitt trigger.
- **LVDS transmitter** (`lvds_tx`). Drives a complementary pair 300 ps after
  its input. The edge aligner, common-mode feedback and termination have no
  logic function.

The delays are plausible values chosen for simulation, not measured ones.

## Test circuits

- **Stand-alone TDC.** A second DLL with TDC logic. Its trigger is a plain pin,
  and its 12-bit result is brought out in parallel. It shares FRAME_RST,
  READ, SHUTTER and the system clock with the quadrants. It is meant for
  the time-ramp characterisation, which sweeps the trigger across the range.
- **RX → TX chain.** An LVDS receiver feeding a transmitter, for eye
  measurements.

A 3 × 3 test SPAD array with its own front end is an analog structure with
no logic function and is not modelled.

## Where this RTL departs from the chip

- **Wired-OR lines.** On the chip, the open-drain wired-OR lines and their
  termination give every pixel a position-dependent delay to the TDC, up to
  about 3.5 LSB. Here they are ideal ORs with no delay, so there is no
  offset map.
- **Coarse counter.** A synchronous counter on the reference clock replaces
  the ripple counter clocked by the DLL.
- **Serial formats.** The valid bit travels in the time word next to the TDC
  value and the frame number, as on the chip. Its position, the order of all
  serial bits and the interleaving of the multiplexers are this design's own
  choices.
- **TDC_cntr.** Stored and wired to the DLL model, which ignores it.
- **Trigger gating.** The trigger is gated by READ. Counters count only
  while READ is high.
- **Pin polarities** of mask and Set_2bit, and the quadrant placement
  (quadrant *q* at rows 16·⌊q/2⌋, columns 16·(q mod 2)), are choices.
- **Frame rate.** The chip is quoted at up to about 4.8 MHz with faster
  links. As built, a frame of 136 clocks at 408 MHz gives 3 MHz. A faster
  frame at 408 MHz cannot drain the 1-bit hit map, which needs 128 clocks.
  Raising the system clock to 652.8 MHz would keep the logic working, but
  would need a 48 ps DLL bin, faster than the chip's delay elements reach.

## Warnings the tools report, and why they stand

- **Latches.** These are intended: the pixel mask cell (an SRAM cell), the
  TDC tap latches and the FC latch (the chip latches them on the trigger),
  and the LVDS receiver's held level (its hysteresis). They are written as
  `always_latch`.
- **Clock-like signals.** The pixel counter is clocked by the front-end pulse,
  the TDC flip-flop by the trigger, and the frame counter by FRAME CLK.
  These are the chip's own asynchronous counting paths.
- **Shutter.** It is used asynchronously (frame counter clear) and
  synchronously (coarse counter enable). That is its job.
- **Unused signals.** `TDC_cntr` is not used by the ideal DLL. The quadrant
  and stand-alone `triggered` flags are internal status with no pin on the
  chip. Several package constants are unused in the modules that import
  the package.

## Simulating

Every block has a self-checking testbench in `tb/` named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` at the end and has a watchdog. With
Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl +libext+.sv -Irtl \
          rtl/dsipm_pkg.sv tb/tb_quadrant.sv --top-module tb_quadrant -o sim
./obj_dir/sim
```

`tb_dsipm_ic` drives the full-size chip through its pins only:

- LVDS clock and control pairs, the serial configuration port, SPAD events;
- it decodes the five output links and compares them with a model of what
  each quadrant should report.

It runs 13 frames:

- eight 1-bit windows with random hits, masked pixels, validation settings
  written between frames and hits inside the dead time;
- a switch to 2-bit mode, then five two-frame windows with saturating
  counts;
- the stand-alone TDC at eight trigger positions;
- the RX → TX chain.

It counts each mechanism and fails if any never happened: time stamps,
valid and rejected events, empty quadrants, masked hits, hits lost to dead
time, multi-hit pixels, saturated counters, the mode switch, frame numbers,
stand-alone TDC results and test-chain bits. It takes about two minutes to
build and under a minute to run.

Two more testbenches run the measurements the chip was characterised with:

- `tb_tdc_ramp` sweeps the stand-alone TDC's trigger across the whole
  313.7 ns range in 23 ps steps, and over two clock periods in 1 ps steps.
  It checks every code against the ideal transfer function and measures
  the bin widths: DNL and INL stay within one ramp step (0.3 LSB), as
  expected of the ideal delay line.
- `tb_dark_count` runs one quadrant through 600 back-to-back frames at the
  full 3 MHz rate, with random per-pixel dark counts and a few hot pixels.
  The hot pixels are masked after a quarter of the run, and validation
  switches from all-OR to pair-AND half-way. It accumulates the hit maps and
  checks them pixel by pixel against the stimulus. It also checks every
  time stamp, frame number and valid bit.

Testbenches set their own parameters where that keeps them short (for example
a smaller matrix in `tb_pixel_matrix`), but the chip-level test uses the
defaults.

## Source files

| file                 | contents                                                   |
|----------------------|------------------------------------------------------------|
| `dsipm_pkg.sv`       | sizes, configuration and time-word types, analog delays    |
| `dsipm_ic.sv`        | top level: chip pins, global blocks, four quadrants        |
| `quadrant.sv`        | matrix, TDC, FC latch, validation, serializers, hit-map MUX |
| `pixel_matrix.sv`    | 16 × 16 pixels, row wired-ORs and row chains               |
| `dsipm_pixel.sv`     | mask cell, hit counter, serializer stage                   |
| `validation_logic.sv`| AND/OR tree                                                |
| `tdc.sv`, `tdc_encoder.sv`, `tdc_dll.sv` | TDC logic, 32-to-5 encoder, DLL model  |
| `frame_counter.sv`, `fc_latch.sv` | 40-bit frame counter and its per-quadrant latch |
| `time_serializer.sv`, `time_mux.sv`, `hitmap_mux.sv` | serial links     |
| `clock_divider.sv`   | multiplexer phases and shift enables                       |
| `init_register.sv`, `address_decoder.sv` | configuration and mask row select |
| `spad_frontend.sv`, `lvds_rx.sv`, `lvds_tx.sv` | behavioural analog models    |
