# MuPix7 digital readout in SystemVerilog

The MuPix7 is a prototype high-voltage monolithic active pixel sensor (HV-MAPS)
for the Mu3e experiment: a 32 x 40 pixel matrix in a 180 nm HV-CMOS process
in which sensor, amplifiers and a complete digital readout share one thinned
chip. Its main idea is a *streaming* readout. Every pixel keeps a hit flag and
an 8-bit time stamp, and an on-chip state machine keeps moving hits out of the
matrix and onto a single 1.25 Gbit/s serial link while the sensor goes on
taking data. There is no trigger and no readout dead time: a pixel is blind
only between its hit and the moment the readout has copied that hit away.

This RTL describes the digital part of that chip, from the comparator outputs
of the pixels to the serial bit stream:

```
 comp[c][r] ──► digital pixel ──► column: second register, row priority, 1-hit buffer ─┐  x32
 (analog)       hit flag, TS                                                             │
                    ▲                                                                    ▼
 Gray counter ──────┘ (8-bit time stamp)          readout state machine + column priority
                                                                    │ 2 bytes / 16 ns
                                                  8b/10b encoder (2 bytes per clock)
                                                                    │ 20 bits / 16 ns
 clk_ser 1.25 GHz ──► clock divider ──► 62.5 MHz ─►  serializer 20:1 ──► sdo (to LVDS)
```

The analog parts (sensor diode, charge amplifier, line driver, second
amplifier, comparator, per-pixel 4-bit tune DAC), the PLL/VCO and the LVDS
driver have no logic function and are not modelled. They reach the RTL as
ports: `comp` (one comparator output per pixel), `clk_ser` (the PLL clock)
and `sdo` (the bit for the LVDS driver).

## Clocks and rates

Everything follows from two numbers: the readout runs at 62.5 MHz and the
link at 1.25 Gbit/s. After 8b/10b coding a byte takes 10 line bits, so the
link moves 125 Mbyte/s, which is exactly two bytes per 62.5 MHz cycle. The
design therefore works in *slots*: every system clock the state machine
produces one two-byte slot (`link_slot_t`), the link encoder codes it into 20
bits, and the serializer shifts those 20 bits out during the next system clock
period.

`clock_divider` derives the 62.5 MHz `clk_sys` from the 1.25 GHz `clk_ser`
with a modulo-20 counter (high for counts 0-9) and gives the serializer a
load strobe at count 15, in the middle of the low phase, when the word
registered at the last rising edge of `clk_sys` is stable. The time-stamp
counter, all pixels, the state machine and the encoder run on `clk_sys`;
only the divider and the serializer run on `clk_ser`.

Reset is asynchronous and active low. Because `clk_sys` stands still while
the divider is in reset, the system-clock registers are reset by the reset
edge itself, not by a clock edge during reset; a testbench must therefore
drive `rst_n` from high to low rather than start it low.

## Capturing a hit in the pixel

`digital_pixel` samples the comparator output with two flip-flops and detects
its rising edge. On an edge it sets the hit flag and latches the 8-bit Gray
time stamp on the bus. While the flag is set, further edges are ignored: the
pixel is dead and its stored time stamp stays that of its first hit. The
readout clears the flag when it copies the hit to the column buffer. If a new
edge is detected in the very cycle the flag is cleared, the new hit wins and
is stored (flag stays set, new time stamp).

The time stamp is an 8-bit Gray counter (`gray_counter`) on the 62.5 MHz
clock, i.e. 16 ns bins and a 4.096 us wrap. Gray code means that a pixel which
latches while the bus changes is off by at most one bin.

Timing: a comparator edge that rises just after a system clock edge sets the
flag three clock edges later; the latched time stamp is the bus value of the
cycle in which the edge was detected (the second clock edge).

## The readout cycle

This is the core of the design. The matrix has 32 columns of 40 pixels. Each
column (`pixel_column`) has, besides its pixels:

* a **second register**, one bit per pixel, that receives a copy of all hit
  flags when the state machine says `load`;
* a **row priority logic** (`priority_encoder`) on the second register,
  which picks the lowest-numbered row that is set;
* a **column buffer** of one hit (row address and time stamp).

On `pull`, each column with a bit left in its second register copies the
selected pixel's row and time stamp into its buffer and, in the same cycle,
clears both that pixel's hit flag and its second-register bit. The pixel is
then live again even though its hit has not yet left the chip. Hits that
arrive after a `load` are not in the second register; they wait for the next
cycle.

The state machine (`readout_fsm`) walks through these states, one per
62.5 MHz clock:

| state | column command | slot sent (first byte, second byte) | next |
|-------|----------------|-------------------------------------|------|
| HDR0  | `load`         | K28.0, K28.0                        | HDR1 |
| HDR1  | -              | cycle counter [15:8], [7:0]          | PULL |
| PULL  | `pull`         | K28.5, K28.5 (filler)               | HIT0 if a column had pending hits, else TRL |
| HIT0  | -              | column, row                          | HIT1 |
| HIT1  | empty the buffer just sent | time stamp (Gray), 0x00  | see below |
| TRL   | -              | K28.4, K28.4                        | HDR0 |

In HIT0 a second priority logic picks the lowest-numbered column whose buffer
is full; its number is held for HIT1. After HIT1 the state machine goes

* back to HIT0 if another buffer is still full;
* to PULL if the buffers are empty, hits are still pending in some second
  register, and the hits sent in this cycle have not yet reached `max_hits`;
* to TRL otherwise, that is when every copied hit has been sent or the hit
  limit has been passed.

A cycle stopped by the limit leaves hits in the second registers, but their
pixel flags are still set, so the next `load` copies them again and nothing
is lost. The limit is only tested when all column buffers are empty, so a
cycle can overshoot `max_hits` by up to 31 hits; `max_hits = 0` means no
limit. `ev_limit` pulses when a cycle is ended by the limit with hits left.

Costs in 62.5 MHz cycles: an empty readout cycle takes 4 (HDR0, HDR1, PULL,
TRL); each pull costs 1; each hit costs 2. Four hits of which two share a
column therefore take 4 + 1 + 2 x 4 = 13 cycles. When it is the only hit
in its column, a hit waits in its pixel for at most the rest of the current
readout cycle plus the two cycles up to the next pull, so at low occupancy
the pixel's dead time is far below the roughly 1 us shaping time of the
analog front end. At high occupancy it grows with the number of hits queued
ahead of it.

### Frame on the link

One readout cycle gives one frame:

```
K28.0 K28.0 | cnt_hi cnt_lo | K28.5 K28.5 | col row ts 00 | col row ts 00 | ... | K28.5 K28.5 | col row ts 00 | ... | K28.4 K28.4
  header      16-bit frame     pull            hit (two slots, back to back)       next pull                          trailer
              counter
```

Bytes are data characters except the K28.x control characters. The frame
counter counts readout cycles and lets a receiver check that no frame was
lost. A hit is 32 bits: column (0-31), row (0-39), the Gray time stamp as
latched, and one reserved byte that is always zero. K28.5 contains the comma
pattern, so a receiver can find the byte boundaries from the PULL slot of any
frame.

At one hit per two cycles the link carries at most 31.25 million hits per
second, a little above the 30 MHz quoted for the chip; per-frame and per-pull
overhead brings the real figure to about 29-31 MHz when hits are spread over
many columns and about 21 MHz when they all sit in one column (3 cycles per
hit).

### Behaviour at the prototype's hit rates

`tb_mupix7_rates` drives the full matrix with hits on random pixels at the
rates the prototype was operated at or rated for (one Bernoulli trial per
16 ns clock):

| offered rate | origin of the rate | delivered | slots with hit data | lost to dead time |
|--------------|--------------------|-----------|---------------------|-------------------|
| 1 kHz | electron/positron test beams | all | 0.0 % | 0 |
| 0.36 MHz | top of the muon-beam rate scan (380 kHz) | all | 1.2 % | 0 |
| 0.43 MHz | pion beam (500 kHz) | all | 1.4 % | 0 |
| 4.5 MHz | Mu3e flux, 40 MHz/cm^2 x 0.1055 cm^2 | all | 14 % | 0 |
| 30.1 MHz | quoted upper limit | 28.8 MHz | 92 % | 2.6 % |

At 30 MHz the link is nearly full; hits wait longer in their pixels, a few
pixels are hit again while still waiting, and those second hits are lost,
as the dead-time rule says. Over several random seeds the delivered rate
stays at 28.6-28.8 MHz, slightly below the live hits offered, so with hits on
random pixels this design sustains about 96 % of the quoted 30 MHz; the
missing cycles are the pull and frame overheads. No hit is corrupted or
duplicated at any rate.

## 8b/10b coding and serialization

`enc8b10b` is the standard Widmer-Franaszek code: the low five bits go
through the 5b/6b table and the high three through the 3b/4b table, each
table holding the code for negative running disparity plus a flag telling
whether the code is complemented at positive disparity. An unbalanced
sub-block flips the running disparity. The alternate D.x.A7 code is used for
x = 17, 18, 20 at negative and x = 11, 13, 14 at positive disparity, and the
K28.0-K28.7, K23.7, K27.7, K29.7 and K30.7 control characters are coded.
Output bit 9 is the first line bit ('a').

`link_encoder` chains two byte encoders (high byte with the disparity left by
the previous slot, low byte with what the high byte leaves) and registers
the 20-bit result; disparity is negative after reset. `serializer` is a
20-bit shift register on `clk_ser` that loads on the strobe from the
divider and sends bit 19 first.

Latency from a slot to the line: the slot is registered by the state machine,
coded and registered by the link encoder one clock later, and loaded into
the serializer 15 `clk_ser` cycles after that clock edge.

## Top level

`mupix7_top` (parameters `COLS_P` = 32, `ROWS_P` = 40) wires these blocks:

| port | dir | meaning |
|------|-----|---------|
| `clk_ser` | in | 1.25 GHz clock from the PLL |
| `rst_n` | in | asynchronous reset, active low (drive it as an edge, see above) |
| `comp[c][r]` | in | comparator output of column c, row r (asynchronous) |
| `max_hits` | in | hit limit per readout cycle, 0 = none |
| `sdo` | out | serial data for the LVDS driver |
| `clk_sys` | out | 62.5 MHz system clock |
| `ts_gray` | out | current time stamp |
| `ev_hit`, `ev_limit`, `cycle_cnt` | out | readout status: hit sent, cycle ended by the limit, frame counter |

Shared constants and types (matrix size, time-stamp width, control
characters, slot and buffer types) are in `mupix_pkg`.

## What follows the prototype and what is this design's choice

Taken from the published description of the MuPix7: 32 x 40 pixels; an
8-bit Gray time stamp at 62.5 MHz; hit flag plus latched time stamp per
pixel; copying the flags to a second register at the start of each readout
cycle; a priority logic per column that copies the first hit to a column
buffer and clears the pixel's flag; a second priority logic that sends the
first column with a hit; repeating until the buffers are empty; restarting
when all hits are read or an adjustable number of hits is passed; a 62.5 MHz
state machine; output made of row, column and Gray time stamp mixed with
control words and synchronization counters; 8b/10b coding; serialization at
1.25 Gbit/s; all clocks generated on chip from a PLL.

Chosen here because the description does not give them:

* which of 32 and 40 counts the columns (32 columns of 40 rows here);
* "first" means lowest index, for rows and for columns;
* the column buffer holds one hit;
* the comparator synchronizer and "set wins over clear";
* the frame format: K28.0 header, 16-bit counter of readout cycles, K28.5
  filler in pull cycles, K28.4 trailer;
* the 32-bit hit word with a reserved zero byte. Four bytes per hit is what
  makes the 1.25 Gbit/s link carry about the 30 MHz the chip is quoted for;
* the hit limit is tested only once the buffers are empty;
* two bytes per clock in the encoder, a divide-by-20 counter for the clock,
  and a load strobe at count 15;
* reset values (all zero, negative running disparity).

One reported figure is not reproduced: at 380 kHz the prototype is said to
use about 4 % of its bandwidth, while here 380 kHz of hits occupy about
1.2 % of the link time (2 extra cycles per hit against 62.5 MHz) or 1.3 % of
the 31.25 MHz hit capacity. The real chip's per-hit or per-frame overhead is
larger than in this design's frame format.

Not built: the configuration path of the 4-bit tune DACs (the DACs are
analog and how their bits are loaded is not described), and the full-size
chip with up to four links, which is only mentioned as the next step.

## Simulation

All files are plain SystemVerilog; every module and testbench is one file
named after it. With Verilator 5, from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mupix_pkg.sv tb/tb_mupix7_top.sv \
          --top-module tb_mupix7_top -o sim
./obj_dir/sim
```

Replace `tb_mupix7_top` by any other testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog that counts a failure if
it hangs.

| testbench | checks |
|-----------|--------|
| `tb_gray_counter` | count equals n XOR (n >> 1), one bit changes per step, wrap at 256 |
| `tb_priority_encoder` | lowest set bit, against the isolated bit `v & -v`, random and corner vectors |
| `tb_digital_pixel` | 3-clock latency, latched time stamp, dead time, clear, set-wins-over-clear, long pulse gives one hit |
| `tb_pixel_column` | rows leave lowest first with their time stamps, `pending`, late hits wait for the next load, pulled pixels are cleared |
| `tb_readout_fsm` | 4 x 4 matrix: empty frames of 4 cycles, frame counter, priority order, 13-cycle frame with back-to-back hits, hit limit splitting 5 hits 2/2/1 |
| `tb_enc8b10b` | published code words, and for all 256 data bytes and 12 control characters at both disparities: disparity rules, run length at most 5, no comma in data, unique decoding |
| `tb_link_encoder` | known slots including disparity carried between bytes and slots, running digital sum within +-1 over 2000 random slots |
| `tb_clock_divider` | 20-cycle period, 50 % duty, one load strobe at count 15 |
| `tb_serializer` | 20 bits out, MSB first, for 50 random words |
| `tb_mupix7_top` | full 32 x 40 chip at default parameters, see below |
| `tb_mupix7_rates` | full chip at 1 kHz to 30 MHz of random hits, see "Behaviour at the prototype's hit rates" (about 10 s) |

`tb_mupix7_top` fires comparator pulses on random pixels in three phases
(sparse random hits, bursts of 48 simultaneous hits over six columns, and a
busy 8 x 10 corner with `max_hits` = 5 and repeated pulses), predicts for each
pulse the time stamp it must carry or that it falls into the pixel's dead
time, aligns to the comma on `sdo`, decodes the 8b/10b symbols and parses the
frames. It requires every live hit to arrive exactly once and nothing else,
consecutive frame counters, and that each mechanism occurs: empty readout
cycles, a second pull in one column, back-to-back hits, cycles ended by the
hit limit and hits lost to dead time. It runs in well under a second.
`tb_mupix7_rates` uses the same decoder and reference.

For the dead-time prediction the testbench reads each pixel's hit flag and
clear signal through hierarchical references (`dut.g_col[c].u_col.hit`);
renaming those instances requires updating the testbench.

Every RTL module contains concurrent assertions for the handshake between
state machine and columns (no pull into a full buffer, no load and pull in
the same cycle, HIT0 only with a full buffer); run with `--assert` to check
them.
