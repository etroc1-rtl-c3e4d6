# ETROC1 digital design in SystemVerilog

ETROC1 is a prototype readout chip for the timing layer of a particle
detector. It is bump-bonded to a Low-Gain Avalanche Diode (LGAD) sensor. For
every particle that crosses a pixel, the chip measures two things:

- **TOA**, the time of arrival of the pixel's discriminator pulse, in bins of
  about 18 ps.
- **TOT**, the pulse's time over threshold, used afterwards to correct the
  amplitude-dependent time walk.

The key idea is a very cheap per-pixel time-to-digital converter (TDC). It is
one free-running ring of 63 NAND gates, with no delay-locked loop. Three banks
of flip-flops take snapshots of the ring, and a tiny lap counter counts how
often it has gone round. The ring's delay drifts with process, voltage and
temperature. Instead of controlling that drift, the chip measures it: every
event is sampled twice, by two strobe pulses exactly one 320 MHz period
(3.125 ns) apart. The difference of the two samples, the *calibration code*,
says how many bins 3.125 ns is worth at that moment.

Around the pixels sit:

- a clock system that turns one 1.28 GHz input into a 40 MHz clock, a
  320 MHz clock and the two-pulse TDC strobe, with programmable phase;
- two readout paths: a continuous diagnostic stream of one pixel (DMRO) and a
  triggered readout of on-pixel buffers (SRO), each a 1.28 Gbps serial link;
- an I2C slow-control interface with triplicated registers.

The chip has a 4 x 4 array of active pixels. It also has a standalone test
pixel and a bare TDC test block.

This RTL covers the digital part of all of this. The analog front end (charge
injection, pre-amplifier, discriminator, threshold DAC) stays outside the
RTL: discriminator outputs come in as ports, and the front end's settings go
out as ports. The few truly analog timing elements are behavioural models with
`#` delays: the delay-line cells and the DLL phase shifter.

## Block map

```
 clk1280 ─► clock_divider ─► phase_shifter ─► MUX1 ─► strobe_gen ─► MUX2 ─► H-tree (clk40, strobe)
                 (÷32)      (320 MHz, 97.66 ps)  ▲ ext clocks            ▲ raw clocks
                                                 test_clk0               test_clk1

 disc[15:0] ─► 16 x active_pixel = tdc + circ_buffer(256 x 30 bit)
                   │ tdc_data                    │ mem_dout
                   ▼                             ▼
                 dmro ─► serializer ─► dmro_sout    sro ─► serializer ─► sro_sout
 sa_disc ─► tdc ─► dmro(1 pixel) ─► serializer ─► sa_dmro_sout     (standalone pixel)
 tdc_test_hit ─► tdc ─► tdc_test_data[29:0]                        (TDC test block)
 scl/sda ─► i2c_slave 0x10 (pixel config) + i2c_slave 0x11 (periphery config)
```

| File | Contents |
|---|---|
| `rtl/etroc1_pkg.sv` | Widths, the TDC word type `tdc_data_t`, frame and register constants |
| `rtl/tdc_delay_line.sv` | Behavioural model: the 63-cell NAND ring |
| `rtl/tdc.sv` | START control, recorders, ripple counter, encoder, output word |
| `rtl/clock_divider.sv`, `phase_shifter.sv`, `strobe_gen.sv`, `clock_gen.sv` | Clock system (`phase_shifter` is behavioural) |
| `rtl/active_pixel.sv`, `circ_buffer.sv` | Pixel: TDC plus a 256-entry circular buffer |
| `rtl/dmro.sv`, `scrambler.sv`, `prbs7.sv`, `serializer.sv` | Diagnostic readout |
| `rtl/sro.sv` | Simple (triggered) readout controller |
| `rtl/i2c_slave.sv`, `tmr_reg.sv` | Slow control with triple modular redundancy |
| `rtl/etroc1_top.sv` | Chip top level and register map |

## The cyclic delay-line TDC

### The ring and its snapshots

The ring has 63 NAND cells, D0 to D62, each with a delay of 17.8 ps.

- Cell D0 takes START and the last tap D62.
- The other cells have one input tied high, so they act as inverters.

While START is low the line rests in an alternating pattern: D0 = 1, D1 = 0,
..., D62 = 1. When the discriminator fires, START rises. A falling edge then
runs down the line, wraps around through D0, comes back as a rising edge, and
so on. The ring therefore oscillates with a period of 2 x 63 = 126 cell
delays (2.24 ns).

Three things observe the ring:

| Recorder | Taps | Clock | Gives |
|---|---|---|---|
| TOA/CAL fine recorder | all 63 | TDC strobe (both pulses) | TOA from pulse 1; Cal = pulse 2 − pulse 1 |
| TOT fine recorder | the 32 even taps D0, D2 … D62 | falling edge of the hit (TOTCLK) | TOT |
| Ripple counter | clocked by D31 | — | laps of the ring, 3 bits |

Each recorder also samples the counter. On the chip, D31 feeds the counter
through a latch whose enable is tied high. The model treats that latch as a
wire.

### Turning a snapshot into a number

A snapshot says which cells have switched since the last pass. XOR it with
the resting pattern and count the ones, giving *n*.

- During the first half-lap D0 has flipped, and *n* cells have switched.
  The phase is *p = n*.
- During the second half-lap the rising edge has already restored cells.
  D0 is back at rest, and the phase is *p = 126 − n*.

The phase *p* (0 to 125 cell delays) is therefore decoded from the snapshot
alone, with no thermometer-to-binary priority logic.

The lap counter steps when D31 rises. That happens 32 cell delays into each
lap, not at phase 0. So the number of *completed* laps is:

- the counter value minus one, if *p ≥ 32*;
- the counter value, otherwise.

```
code = 126 * laps + p          (TOA/CAL recorder, unit 17.8 ps)
code =  63 * laps + q          (TOT recorder, q in 0..62, unit 35.6 ps)
```

The TOT recorder sees every second tap only, so its bin is two cells. Its
lap correction threshold is *q ≥ 16*, the even tap that follows D31.

The three TDC outputs are:

- **TOA** is the first-strobe code: the delay between the hit and the first
  strobe pulse, in 17.8 ps bins. The TDC runs from the hit to the strobe, so
  a later hit gives a smaller TOA.
- **Cal** is the second-strobe code minus the first: 3125 / 17.8 ≈ 176 at the
  nominal cell delay. Dividing TOA by Cal and multiplying by 3.125 ns gives a
  time that does not depend on the actual cell delay.
- **TOT** is the code at the trailing edge of the hit.

### Control and output word

The paper does not describe the TDC control, so it is this design's own:

- START is set by the rising edge of `hit`.
- START is cleared by the next rising edge of the 40 MHz clock. The clear is
  self-timed: the flip-flop that makes it is reset as soon as START falls.
- The same 40 MHz edge registers the 30-bit output word
  `{hit, toa[9:0], tot[8:0], cal[9:0]}`. It holds the result of the hit that
  started in the 25 ns period that just ended, one period of latency.
- `hit` = 1 only if both strobe pulses arrived while the ring ran. A pulse
  that starts after the strobes gives an all-zero word.
- TOT reads 511 if the trailing edge comes after the period ends.
- A value too large for its field saturates at all ones.

### Ranges and limits

- **TOA range.** The strobe pulses rise 18.75 ns and 21.875 ns after the
  40 MHz rising edge. The 3-bit counter covers 8 laps = 17.9 ns, and the
  paper quotes an *effective* TOA range of 11.6 ns. So a hit should arrive
  between about 7 ns and 18.75 ns into the period. Earlier hits let the lap
  counter wrap before the second strobe, which corrupts Cal first and then
  TOA. The testbenches use hits 7.5 ns to 18.5 ns into the period.
- **TOT blind cell.** Phases 31 and 32 look the same to the even-tap TOT
  recorder. If the trailing edge falls in the one cell delay in which D31 has
  not yet risen but D30 has, the counter and the snapshot disagree. TOT is
  then one lap (63 codes) too small. This follows from the recorder layout
  itself (the counter is driven by an odd tap, the TOT recorder sees only
  even taps), not from the encoder. It affects about 1 trailing-edge position
  in 126. The recorded bits alone cannot tell it from a correct code with
  q = 16. The testbenches keep pulse widths away from ring phases 29 to 34.
- **Cell delay.** The model uses 17.8 ps for every cell. The paper reports
  a TOT bin of 35.4 ps; the model's two-cell bin is 35.6 ps.

## Clocks and the strobe

All timing is referred to the 1.28 GHz bit clock.

- `clock_divider` divides it by 32. Its 40 MHz output rises when the
  division counter wraps to 0.
- `phase_shifter` is a behavioural model of the DLL. It makes 320 MHz (bit
  clock ÷ 4, realigned at each 40 MHz rising edge). It delays both clocks by
  `phase_sel` × 97.66 ps, where 97.66 ps is one eighth of a bit period, and
  256 steps make one full 40 MHz period.
- MUX1 (`test_clk0`) replaces the internal pair with off-chip 40/320 MHz
  clocks.
- `strobe_gen` samples 40 MHz with an 8-flip-flop chain at 320 MHz. Its mask,
  "tap 5 high and tap 7 low", is true for exactly two 320 MHz cycles. The mask
  is retimed on the 320 MHz falling edge and ANDed with the clock. The result
  is two clean pulses, 3.125 ns apart, that rise 6 and 7 periods of 320 MHz
  (18.75 ns and 21.875 ns) after the rising edge of the generator's 40 MHz
  output. That output is also the clock sent to the pixels, so strobe and
  clock stay in a fixed relation.
- MUX2 (`test_clk1`) sends either that clock and strobe to the H-tree, or the
  raw 40 MHz and 320 MHz clocks (a test mode: the pixels then see a strobe
  pulse every 3.125 ns).

The H-tree and the line drivers are wires here. The chip's 40 MHz clock and
strobe are also available as outputs (`clk40_out`, `strobe_out`).

## Diagnostic mode readout (DMRO)

The DMRO streams one pixel continuously, one word every 25 ns. The path is:

1. Every pixel has a buffer register with an enable. Disabled buffers drive
   zero.
2. Within a column the buffers share a data lane, modelled as an OR, so
   enable at most one pixel per column.
3. MUX1 selects one of the 4 column lanes (`col_sel`).
4. A self-synchronous scrambler, x^58 + x^39 + 1, works on the 30-bit word
   MSB first.
5. MUX2 takes the plain or the scrambled word (`scr_en`).
6. The 2-bit header `10` is prepended to make the 32-bit word.
7. The last multiplexer can send a PRBS7 pattern (x^7 + x^6 + 1, 32 bits per
   word, so the serial stream is plain PRBS7) instead (`prbs_en`).

Timing and the serial line:

- **Latency.** A pixel word registered at 40 MHz edge *k* is in the DMRO
  output word after edge *k*+1.
- **Serializer.** It samples the 40 MHz clock on the falling bit-clock edge
  and loads the word on the next rising edge. Then it shifts the word out MSB
  first, 781.25 ps per bit. The word therefore starts one bit clock after
  the 40 MHz edge.
- **From hit to line.** A hit in period *k* has its DMRO word on the line from
  edge *k*+3 plus one bit clock.
- **Descrambling.** A receiver applies the same taps to the received payload
  bits and locks after 58 bits.

The standalone pixel has its own TDC and a one-pixel DMRO with its own
serializer (`sa_dmro_sout`).

## Simple readout (SRO)

Each active pixel writes its TDC word, hit or not, into its own circular
buffer every 40 MHz clock. The buffers are 256 entries of 30 bits, which
holds 6.4 µs of history. All buffers share one write address, which advances
every clock.

An **L1Accept** (`l1a`) does the following:

1. It freezes all buffers. The last entry is the one written at the edge
   that sampled L1Accept.
2. It records the bunch-crossing counter (BCID). The BCID is restarted by
   `bc0` and wraps after 3563.
3. It sends one frame on `sro_sout`. The frame contains, for every pixel
   selected in the region-of-interest mask ROI[15:0] and in ascending pixel
   order, the ADDR_DEPTH most recent entries, oldest first. ADDR_DEPTH = 0
   means all 256.

Writing resumes right after the last frame word. An L1Accept that arrives
during a readout is ignored.

Frame, one 32-bit word per 25 ns:

```
SOF   {01, 3C, 0000, BCID[11:0], ADDR_DEPTH[7:0]}
data  {10, tdc_word[29:0]}        x (pixels in ROI) * ADDR_DEPTH
EOF   {01, 3D, 00, word_count[15:0]}
idle  {01, 3F, 000000}            between frames
```

The SOF comes out one clock after the L1Accept edge, and the data words
follow back to back. The data from pixel p = 4·row + col is read over column
bus *col*, and a multiplexer picks the column.

The paper describes the freeze / read / resume behaviour and the block
structure: ADDR counter, BCID counter, FSM, column buses, MUX. The frame
format, the BCID range and the buffer depth are this design's choices.

## Slow control and register map

Two instances of one I2C slave share the bus, at addresses 0x10 and 0x11.

- **Per instance.** Each gives the chip 32 configuration bytes and exposes
  16 status bytes. Address 0x30 holds a read-only byte `{revision[3:0],
  chip_id[3:0]}`.
- **Writes.** A write sends a register pointer, then data bytes to
  consecutive registers.
- **Reads.** A read, normally after a pointer write and a repeated START,
  returns consecutive registers until the master sends NACK.
- **Synchronisation.** SCL and SDA are synchronised to the 40 MHz clock, so
  SCL may run up to about 4 MHz.
- **Triplication.** Every configuration byte is triplicated (`tmr_reg`). The
  logic sees the majority vote, and all three copies are rewritten with it
  every clock. A single upset is outvoted at once and repaired one clock
  later.

| Slave | Byte | Meaning |
|---|---|---|
| 0x10 | 0–19 | threshold DAC codes, 10 bits per pixel: pixel p is bits 10p+9..10p of bytes 0–19 read as one little-endian word |
| 0x10 | 20 | [4:0] injected charge select |
| 0x10 | 21–22 | charge injection enable per pixel |
| 0x10 | 23 | [2:0] PA bias, [4:3] feedback resistor, [6:5] load capacitance |
| 0x10 | 24 | [3:0] discriminator hysteresis |
| 0x10 | 25 | [0] standalone pixel charge injection enable |
| 0x10 | 26–27 | standalone pixel DAC code |
| 0x10 status | 0–3 / 4–7 | last hit word of the TDC test block / of the standalone pixel |
| 0x11 | 0 | phase shift code (97.66 ps per step) |
| 0x11 | 1 | [0] TestCLK0 (external clocks), [1] TestCLK1 (raw clocks to the H-tree) |
| 0x11 | 2 | DMRO: [1:0] column, [2] scrambler, [3] PRBS7 |
| 0x11 | 3–4 | DMRO pixel enables |
| 0x11 | 5 | standalone DMRO: [0] enable, [1] scrambler, [2] PRBS7 |
| 0x11 | 6–7 | SRO region of interest |
| 0x11 | 8 | SRO ADDR_DEPTH |
| 0x11 status | 0–1, 2, 3 | BCID of the last L1Accept, frame count, [0] busy |

The paper gives the register counts (32 written, 16 read), the 4-bit chip ID
and the triplication. The map itself is this design's own.

## What follows the paper and what does not

These follow the paper:

- Pixel count and arrangement.
- TDC structure: 63-cell NAND ring, recorders on all taps and on even taps,
  counter on D31, double strobe, 30-bit word with 10/9/10/1 bits.
- Bin sizes.
- Clock chain: divider, DLL phase shifter with ~97.6 ps steps, MUX1, 8-DFF
  strobe generator, MUX2.
- DMRO structure.
- SRO freeze-and-read behaviour.
- Two I2C slaves with 32/16 bytes, chip ID and triplication.
- The standalone pixel and the TDC test block.

These are this design's own choices, because the paper does not give them:

- TDC START/clear control and the output saturation rules.
- Encoder arithmetic.
- Strobe position: 18.75 ns into the period.
- Scrambler polynomial, DMRO header value and PRBS bit order.
- Serializer load point and bit order.
- Circular buffer depth: 256.
- SRO frame format and L1Accept-while-busy policy.
- I2C register map and protocol details.
- Reset.

Known departures and simplifications:

- TOT bin 35.6 ps instead of the measured 35.4 ps; there is one cell delay
  for the whole ring.
- The TOT blind cell described above.
- The H-tree, eRx/eTx line drivers and dummy pixels are not modelled beyond
  wires and ports.
- The analog front end is not modelled. Its outputs (disc) and controls
  (DAC codes, charge select, bias bits, hysteresis, injection enables) are
  ports.
- The charge-injection pulse, which the chip distributes through the H-tree,
  is a plain fan-out of `qinj_in` to every pixel's `qinj_pulse`. The
  per-pixel enables leave separately (`qinj_en`), since on the chip they
  close the injection switch.
- `tdc_delay_line` and `phase_shifter` use `#` delays and real-valued
  parameters. They are simulation models of full-custom circuits and do not
  synthesise.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tdc_delay_line_tb`: ring period of 126 cells, delay between taps, return
  to rest.
- `tdc_tb`: about 200 random hits. TOA, TOT and Cal are compared with the
  programmed times (±1 bin). Also: no-hit word, late hit, TOT saturation,
  one-period latency.
- `clock_divider_tb`, `phase_shifter_tb`, `strobe_gen_tb`, `clock_gen_tb`:
  periods, duty cycle, phase steps, the two strobe pulse positions, both
  multiplexers.
- `scrambler_tb`, `prbs7_tb`, `serializer_tb`: against bit-level reference
  models; the descrambler locks; PRBS7 recurrence and period.
- `dmro_tb`: column selection, pixel enables, scrambler, PRBS, latency.
- `circ_buffer_tb`, `active_pixel_tb`: storage over more than one buffer lap,
  with the TDC codes checked.
- `sro_tb`: random hits and L1Accepts against a reference history model,
  covering frame contents, order, BCID and L1Accept while busy.
- `i2c_slave_tb`: writes, reads, auto-increment, wrong address, chip ID, an
  injected register upset.
- `etroc1_top_tb`: the whole chip at its default size, end to end. It
  configures both slaves over I2C and reads them back, drives hits into pixel
  5, the standalone pixel and the TDC test block, and deserializes all three
  serial outputs. It checks DMRO words, standalone words, the test-block word,
  a late hit, TOT saturation, an SRO frame with its BCID and status
  registers, a second L1Accept ignored while busy, scrambled and PRBS7
  streams, a register upset, a phase shift of 8 steps (781.25 ps) and the
  TestCLK1 switch. It counts each of these mechanisms and fails if any never
  happened. It runs in about 20 s of wall time (360 µs simulated).

## Simulating

Every file sets `timeunit 1ps; timeprecision 1fs;`. The TDC model needs the
femtosecond precision for its 17.8 ps cells. With Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal \
  rtl/etroc1_pkg.sv rtl/*.sv tb/i2c_master.sv tb/etroc1_top_tb.sv \
  --top-module etroc1_top_tb -Mdir obj_top -o sim
obj_top/sim
```

Any other testbench builds the same way: pass its file and `--top-module`.
The package must come first. `tb/i2c_master.sv` is a bus-master helper used
by the I2C and top-level testbenches.

Things to know when changing the design:

- The simulator is two-state, so every flip-flop that is read has a reset or
  an initial value.
- The TDC is asynchronous by design: `hit`, `strobe` and the ring taps act as
  clocks, and START has an asynchronous clear. Lint reports these as derived
  clocks and asynchronous resets; that is intended.
- Hits must respect the TOA range above, or Cal and TOA wrap.
