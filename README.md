# Trigger and readout logic for one sector of a SiPM Cherenkov camera

A Cherenkov telescope camera has to find a few-nanosecond flash of light among
thousands of pixels. It then has to read out the waveforms of that flash from
analog memories that keep only the last 16 µs. This RTL describes the digital
part of one camera sector: 25 camera modules on one backplane. Each module has
64 image pixels (1600 per sector) sampled at 1 GSa/s into TARGET7 switched-capacitor
memories.

The sector does four things:

1. It finds the flash. Each module sums its pixels in groups of four and
   reports 16 "trigger pixels". The backplane raises a trigger when three
   adjacent trigger pixels fire together anywhere in the sector. It stamps that
   trigger with a 1 ns time, although its logic clock runs at 4 ns.
2. It tells every module when to look. The trigger is sent back to all modules
   as a trigger acknowledge (TACK) carrying the 1 ns time.
3. It reads the right memory. Each module turns the TACK time into the
   addresses of the memory blocks that hold those nanoseconds. It reads them
   and sends one record per pixel to the network switch.
4. It keeps the hardware safe and in step. This covers staggered power-up,
   trigger-channel masks, a sector-wide time SYNC, a current limit on the SiPM
   bias, GPS time tags for each trigger, and a pulse former for the calibration
   flasher.

Everything analog or commercial is outside the logic and shows up as ports of
the top module `sct_camera`. This includes the sensors, the TARGET7 sampling
and digitizer, the DACs, the Ethernet switch boards, the housekeeping computer,
the laser and fiber of the time-tagging path, and the clock oscillator.

## Block map

```
                mod_trig[400]                     SPI from housekeeping computer
                     |                                     |
            +--------v---------+   trig_en[400]    +-------v-------+
            |    bp_trigger    |<------------------|    hk_fpga    |--> mod_pwr[25], dacq_pwr
            | 4 x coinc3 (A-D) |                   | SYNC, enables |
            +--------+---------+                   +-------+-------+
     bp_trig (TACK), trig_time, trig_pattern               | sync, sync_value
        |            |             |                       |
  trig_serializer  gps_ttag   +----v-----------------------v----+  x 25
  (link words)    (GPS tags)  |            fee_fpga             |
                              | ns_timer  t7_timing_gen         |--> t7_ctrl (to TARGET7)
                              | t7_wr_addr  fee_readout         |<-> block reads (digitizer)
                              | sipm_bias_guard                 |--> waveform bytes
                              +---------------------------------+
  flasher_pulser: flash_trig -> flash_led[10]
```

| module | role |
|---|---|
| `sct_pkg` | sector geometry, storage sizes, record length, window-to-block function |
| `coinc3` | one coincidence pipeline: pixels hit together with at least two hit neighbours |
| `bp_trigger` | backplane trigger: grid placement, mask, four phase pipelines, 1 ns stamp, dead time |
| `ns_timer` | 64-bit nanosecond counter, loaded by SYNC |
| `t7_timing_gen` | the six TARGET7 sampling signals on a 64 ns cycle |
| `t7_wr_addr` | storage write addressing (ping-pong, +3/−1 block order) |
| `fee_readout` | TACK time → block addresses → per-channel waveform records |
| `sipm_bias_guard` | trim-voltage codes and the 128 mA module current limit |
| `fee_fpga` | one module's logic: the five blocks above plus SYNC alignment |
| `hk_fpga` | SPI register file, power sequencing, trigger enables, SYNC |
| `trig_serializer` | trigger time and hit pattern as 16-bit link words |
| `gps_ttag` | seconds and nanoseconds since the last GPS PPS, latched on each trigger |
| `flasher_pulser` | one fixed-width LED pulse per flasher trigger edge |
| `sct_camera` | the sector: one backplane and 25 modules |

## Clocks and the sector time

There are two clocks. `clk_ph[0]` is the 250 MHz logic clock, derived on the
camera from a 125 MHz oscillator. `clk_ph[1..3]` are copies of it delayed by
1, 2 and 3 ns. `clk_1g` is the 1 GHz sampling clock and rises together with
`clk_ph[0]`. The backplane and all modules run their logic on `clk_ph[0]`. In
the real camera the modules run on an 8 ns clock locked to the backplane; one
clock domain is a simplification made here.

All timing is in nanoseconds since an agreed origin. Each block that needs the
time keeps its own 64-bit `ns_timer`, which steps 4 per clock. A SYNC, issued
from the housekeeping SPI, loads the same value everywhere on the same clock
edge. The SYNC also restarts each module's 64 ns TARGET7 cycle. It crosses into
`clk_1g` through an edge detector and two more flops. The delay is chosen so
that sampling phase 0 falls exactly on the 1 GHz edge at which the time equals
the SYNC value. After SYNC, ns *t* of the sector time is therefore sample
*t − SYNC* of every module. SYNC values must be multiples of 4 ns.

## The three-adjacent trigger

### Where the trigger pixels sit

The coincidence needs neighbours, so the 400 module trigger outputs are first
placed on the 20 × 20 trigger-pixel grid of the sector:

* Modules fill a 5 × 5 grid: module *m* is at column *m* mod 5, row *m* / 5.
* Inside a module, trigger pixel *t* is in quadrant *t*/4 and at position
  *t* mod 4 within it. Both use the order bottom-left, bottom-right, top-left,
  top-right. Local coordinates: x = {0,1,0,1,2,3,2,3,0,1,0,1,2,3,2,3}[t],
  y = {0,0,1,1,0,0,1,1,2,2,3,3,2,2,3,3}[t].
* Neighbouring modules in a row are mounted 180° apart. Modules in odd columns
  therefore use (3 − x, 3 − y).

The same mapping (`gidx` in `bp_trigger`) turns the grid pattern back into
module order for `trig_pattern`. Bit *m*·16 + *t* is therefore always module
*m*, trigger pixel *t*. The channel enables from `hk_fpga` are applied before
the placement. A masked pixel never counts as hit.

### Adjacent triples

Diagonal neighbours count. Three pixels are adjacent when they form a connected
group under 8-neighbour adjacency. In every such group, one pixel touches the
other two. The whole search is therefore a local test: a hit pixel with at least
two hit neighbours. `coinc3` evaluates it for all 400 pixels in parallel. It
pads the grid with a zero border and adds the eight neighbour bits with an
adder per pixel. Module edges are not special: a triple may span two or more
modules.

### Four phases, one nanosecond

A 250 MHz clock samples each input every 4 ns. Two 10 ns pulses that overlap
by only 1.5 ns could then fall between samples. `bp_trigger` therefore runs
four identical copies of `coinc3`, pipelines A–D, each clocked by one of
`clk_ph[0..3]`. Together they sample the inputs every nanosecond. Each pipeline
latches the inputs on its own edge and registers its result one edge later.
The four results and patterns are then retimed into `clk_ph[0]`.

One retimed set is a 4 ns window. Window *k* covers ns 4*k* … 4*k*+3, measured
from a `clk_ph[0]` edge. If any pipeline saw a triple in the window:

* `trig_time` = time of the window's first edge + index of the first pipeline
  that fired. This is the 1 ns stamp: the first 1 ns sample at which the
  triple was present.
* `trig_pattern` is the input pattern that same pipeline sampled.
* `bp_trig` pulses for one clock, at the `clk_ph[0]` edge 4(*k*+3). That is
  12 ns after the window opened.

### Dead time

After each trigger, coincidences are ignored for `DEADTIME_CYC` clocks (50 000
= 200 µs) and counted in `n_vetoed`. In the camera this keeps the modules from
triggering on the electrical noise of their own TACK. It also limits the
trigger rate to 5 kHz.

## TARGET7 sampling control and the storage order

Each TARGET7 channel samples onto 64 capacitors in two groups of 32. While one
group samples (32 ns), the other is copied into one block of a 512-block,
32-sample storage array. That array is 16.384 µs of history. Six signals steer
this and repeat every 64 ns. `t7_timing_gen` produces them from a 1 GHz phase
counter, each high from its leading edge (inclusive) to its trailing edge
(exclusive). It wraps around the cycle end when the trailing edge is earlier.
The edges are the optimised settings of the camera:

| signal | leading / trailing edge (ns) | job |
|---|---|---|
| SSTin | 0 / 32 | sample start |
| SSPin | 50 / 3 | sample stop (wraps) |
| Incr1 | 3 / 18 | advance group 1 write address |
| STRB1 | 32 / 39 | copy group 1 into storage |
| Incr2 | 35 / 50 | advance group 2 write address |
| STRB2 | 0 / 7 | copy group 2 into storage |

The edges enter as run-time inputs (`cfg_le`, `cfg_te`) and are captured at
reset release and on SYNC. `fee_fpga` drives the table values.

Not every edge table works. A capacitor holds its sample from SSTin's leading
edge to SSPin's leading edge, with both edges delayed 1 ns per capacitor. All
32 capacitors of a group therefore hold together only for a short window:
18 ns with the table above. `t7_timing_gen` reports on `cfg_ok` whether the
loaded edges obey two rules:
- each STRB lies inside its group's window;
- each Incr finishes between two STRBs of its group, so the address moves
  before the copy.

Settings that break these rules put part of a pulse into the wrong block.
Seen in the data, this looks like a small pre-pulse ahead of the real one.

Group 1 always writes even blocks and group 2 odd blocks, and each Incr adds 2.
`t7_wr_addr` starts the addresses at 510 and 1 after SYNC, so the sampled
32 ns windows land in blocks 0, 3, 2, 5, 4, 7, … This +3/−1 order gives the one
formula the readout needs. Window *w*, counted from SYNC, is in block *w* mod 512
if *w* is even and (*w* + 2) mod 512 if *w* is odd (`sct_pkg::block_of_window`).
`t7_wr_addr` reports each transfer on `wr_valid`/`wr_block`. The testbenches use
that report to check the formula against what is actually written. The
addressing logic is inside the ASIC in the real camera. It is written out here
because the readout depends on it.

## From TACK to waveform records

`fee_readout` takes the TACK time. `fee_fpga` first subtracts the last SYNC
value, so the time counts from SYNC as the write order does. The trigger lies in
window *w* = *t*/32. Starting `PRE_BLK` (1) windows earlier, the readout reads
`N_RD_BLK` consecutive windows of each of the 64 channels. It asks the digitizer
for one block of one channel at a time (`rd_req`, `rd_block`, `rd_ch`). It then
takes the 32 samples on `smp_valid`, with no back-pressure, into a 32-entry
buffer and streams them out as bytes with a ready/valid handshake. Each channel
gives one record:

| byte | content |
|---|---|
| 0 | module id (`MOD_ID`) |
| 1 | channel 0–63 |
| 2–3 | block id of the first window (9 bits, big-endian) |
| 4 | event counter, low 8 bits |
| 5… | samples, 2 bytes each, 12-bit value big-endian |

With the default 4 blocks (128 samples) a record is 261 bytes. With
`N_RD_BLK = 2` (64 samples), the mode planned for normal data taking, it is
133 bytes. A whole sector readout is then 1600 × 133 ≈ 213 kB. A TACK that
arrives during a readout is dropped and counted in `n_dropped`.

The TACK must arrive within the 16 µs the storage holds. In this design it
follows the light by about 20 ns: the trigger pipeline plus one clock.

## Housekeeping: power, masks and SYNC

`hk_fpga` is an SPI slave. It uses mode 0 with 16-bit frames, MSB first:
bit 15 is read (1) or write (0), bits 14:8 the address, bits 7:0 the data. A read
returns the register in the low byte of the same frame. SCLK is synchronised
into the logic clock, so it must be below a quarter of it.

| address | register |
|---|---|
| 0–3 | module power request, bit *m* = module *m* |
| 4 | DACQ (switch board) power, bits 1:0 |
| 5 | write: issue SYNC |
| 6 | monitor select |
| 8–15 | SYNC value, byte 8 = bits 7:0 |
| 16–19 | trigger count (read only) |
| 20–23 | modules actually powered (read only) |
| 24–25 | selected monitor reading, 16 bits (read only; reading 24 latches the value for 25) |
| 32–81 | trigger enable, byte 32+*k* = channels 8*k*…8*k*+7 |

Power is switched on one module at a time, lowest number first, `SEQ_GAP`
clocks apart (1000 = 4 µs by default), to limit the inrush current. Clearing a
request switches the module off at once. Everything is off and masked after
reset.

The monitor readings come from the backplane ADCs, which are outside the
logic, on the `mon_value` input. Reading 2*m* is module *m*'s supply voltage
and 2*m*+1 its current. The last three are the backplane voltage, current and
temperature.

## Bias protection

Each module's SiPMs get one bias voltage plus a trim voltage per group of four
pixels. `sipm_bias_guard` keeps the 16 trim codes, in mV, clamped at 4000. It
sums the 16 measured group currents, each saturated at the 50 mA the trim DAC
can sink. When the total reaches 128 mA it latches a trip: `module_on` drops
and all trims read 0. `clear` re-arms it once the current is back below the
limit. The stored codes are then restored.

## Trigger link, GPS tags and flasher

* `trig_serializer` sends each trigger as 30 words: the start word 0xBC50
  (flagged `tx_k`), the 64-bit time in four words (most significant first),
  and the 400-bit pattern in 25 words (least significant first). A trigger
  that arrives while a frame is being sent is dropped and counted.
* `gps_ttag` counts PPS edges as seconds and clock periods as nanoseconds since
  the last PPS. It latches both on each rising edge of the trigger pulse. In
  the camera the trigger fires a laser diode whose light travels about 100 m of
  fiber to a photodiode next to the GPS receiver. Here that path is a wire.
  The resolution is one clock (4 ns in the sector). The few-ns accuracy of the
  real tagger needs an interpolation that is not described.
* `flasher_pulser` turns each rising edge of the flasher trigger into one
  `WIDTH`-clock pulse on the enabled LEDs. It is the logic form of the gate and
  RC-delay pulse former of the flasher board: pulse = trigger AND NOT(delayed
  trigger).

## Where this departs from the published camera

* Single 250 MHz clock domain for backplane and modules. The modules really
  run on an 8 ns clock.
* Chosen here where the description gives only the function:
  * the SPI framing and register map;
  * the power-on spacing;
  * the record header fields;
  * the digitizer read handshake;
  * `PRE_BLK`;
  * the link frame format;
  * the module placement order on the grid, and which columns are rotated;
  * the tagger's time base.
* The dead time sits in the trigger logic. The description says only that a
  200 µs dead time is enforced.
* The trigger is acknowledged directly by the backplane. In the upgraded camera
  a separate array-trigger board (not part of this sector) decides and sends
  the TACK.
* Default readout is 4 blocks (128 samples, as in the first tests).
  `N_RD_BLK = 2` gives the 64-sample, 133-byte records planned for normal
  operation.
* Not modelled: the TARGET7 analog sampling, storage and Wilkinson digitizer;
  the analog trigger sums and thresholds; the DACs and ADCs; temperature
  control; the switch boards; the motors and shutter. They appear only as ports
  or as testbench models.

## Sizes and rates

* Trigger grid: 400 inputs, 4 × 400 coincidence cells. The whole sector
  synthesises (generic cells) to about 22 500 cells and 14 300 flip-flop bits.
* Dead time 200 µs → at most 5 kHz of triggers. A module readout of 64
  channels × 4 blocks takes about 100 µs at one byte per clock, so the modules
  are idle again before the dead time ends. At the nominal 1 kHz the sector
  sends 1600 × 133 B × 1 kHz ≈ 1.7 Gbit/s with 64-sample records.
* Storage: 512 × 32 ns = 16.384 µs of history per channel.
* The full camera (177 modules, 11 328 pixels, nine sectors) would need nine of
  these sectors plus the array-trigger board. This RTL is one sector.

## Testbenches and how far to trust them

Every block has a self-checking testbench in `tb/`, named `tb_<module>`. Each
compares against values it computes itself and prints
`TB_RESULT checks=… failures=…`. Each has a watchdog. The module testbenches use
a behavioural digitizer, `t7_digitizer_model`, whose sample values are a formula
of module, block, channel and sample index. Any misrouted block therefore shows
up.

* `tb_coinc3`: hand-made shapes (lines, L, diagonals, pairs, borders) and
  random patterns against a brute-force search for connected triples.
* `tb_bp_trigger`: pulses placed with 0.25 ns resolution, including 1.5 ns
  overlaps. Checks the 1 ns stamp, pattern, latency, masking, module rotation
  and dead time.
* `tb_t7_timing_gen`, `tb_t7_wr_addr`: edge positions for several edge tables;
  the 0, 3, 2, 5, … order and wrap at 512.
* `tb_fee_readout`, `tb_fee_fpga`: every byte of every record. The block read
  for each window is checked against the block the write logic actually used,
  including after SYNC at an arbitrary value and after the storage has wrapped.
* `tb_hk_fpga`: every register over SPI, SYNC pulse, power order and spacing.
* `tb_sct_camera`: the whole sector at 4 modules, 8 µs dead time and 2-block
  records. It counts each mechanism it sees work: power sequencing, masking,
  monitor readback, SYNC, trigger time and pattern, veto, readout, write order, dropped TACK,
  link frame, GPS tag, flasher and over-current trip. It fails on any that
  never happens.
* `tb_trigger_rate`: the backplane trigger at its defaults under long pulse
  trains, as in a threshold rate scan. A pulse every 110 ns saturates the rate
  just under 5 kHz (11 triggers in 2.2 ms, each at least 200 µs after the
  last). A 1 kHz train triggers on every pulse, with stamps exactly 1 ms apart.
* `tb_sct_camera_full`: the sector at its defaults (25 modules, 200 µs dead
  time, 4-block records). It covers power-up of all 25 modules, a triple that
  spans two modules (one rotated), all 1600 records of 261 bytes, a veto 50 µs
  later and a new trigger after the dead time.

Each testbench was also run against a copy of its block with one deliberate
error, and each reported failures.

What the tests cannot show is agreement with the real hardware. The timing
tables, block order and record size follow the published description. The
other interface details listed above are choices made here.

## Simulating

The code is SystemVerilog-2017 and builds with Verilator 5. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/sct_pkg.sv tb/tb_sct_camera.sv --top-module tb_sct_camera
obj_dir/Vtb_sct_camera +verilator+rand+reset+2
```

Replace the testbench name to run any other. `tb_sct_camera` runs in seconds;
`tb_sct_camera_full` in under a minute. Verilator is a two-state simulator, so
every register has a reset; the testbenches start undefined state at random
values to show that nothing depends on it. To change the sector size, trigger
dead time or readout length, set the parameters of `sct_camera` (`N_MOD`,
`DEADTIME_CYC`, `N_RD_BLK`, `SEQ_GAP`).
