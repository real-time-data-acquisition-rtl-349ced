# HOLD: acquisition firmware for a MHz line camera

An electro-optical bunch-length monitor at a free-electron laser produces one
256-pixel spectrum per electron bunch, up to 4.5 million times per second, in
bursts (macro-pulses) of up to 2700 bunches. This firmware runs in the FPGA
that sits between the line detector (GOTTHARD readout chips plus a 14-bit ADC)
and the outside world. It does three things at once:

* drives the readout chip, turns the ADC sample stream into lines, and keeps
  the lines of each macro-pulse in a DDR3 ring buffer until a host asks for
  them (storage path);
* computes, for every line, the beam's centre of mass, lateral spread and mean
  signal, and sends them on a separate low-latency link to the RF feedback
  controller (BBF path);
* serves register access, PLL, power-supply (UART) and bias-DAC (I2C) control
  through the same optical link that carries the bulk data.

Everything is plain, synthesizable SystemVerilog in one clock domain. The DDR3
memory controller, the Aurora link cores and the transceivers are vendor IP and
are not part of this RTL: their user-side ports are ports of `hold_top`.

```
 triggers ─ trigger_source ─ frontend_driver ──► GOTTHARD control, ADC SPI
                                  ADC samples + data valid
                                        │
                                 adc_data_reader ── lines: 16 beats × 256 bit
                      ┌─────────────────┴──────────────────┐
               framer_dropper                      background_subtractor
                      │                                    │
               fifo_subsystem ◄─ axi_switch ─► DDR3 port   fraction_calculator
                      │                                    │
               frame_reader                        statistical_module
                      │                                    │
   bulk link ◄─ axis_mux_demux ◄─ axi_mm_to_stream   low_latency_link ─► LLRF link
                      │               │
                      └─► requests    axil_switch ─► register_file, pll_controller,
                                                     axil_uart, 2 × axil_i2c
```

## Lines, beats and pixels

A line is 256 pixels. The ADC delivers 14-bit samples; they are stored
zero-extended to 16 bits. The datapath moves 16 pixels per clock, so a line is
16 beats of 256 bits (lane *k* of beat *b* is pixel 16·*b*+*k*, in bits
[16k+15:16k]). The constants are in `rtl/hold_pkg.sv` (`N_PIX`, `ADC_BITS`,
`PIX_W`, `LANES`, `LINE_BEATS`, `MAX_LINES`); the lane count of 16 is this
design's choice and sets the minimum clock: at 16 clocks per line, 4.5 MHz
lines need at least 72 MHz.

## Driving the readout chip

The GOTTHARD chip has no clock; it does what its control lines say.
`frontend_driver` runs one FSM per line trigger: `int_reset` for `t_reset`
clocks, `integrate` for `t_integ` clocks, then it waits until the previous
line's readout is in its last step and raises `hold`. Taking the sample starts
a readout sequencer that keeps `hold` high and raises `ro_en` for 16 clocks,
one multiplexer step per clock (`ro_start` marks the first). The next line may
integrate while the previous one is read out. A trigger that arrives while the
FSM is busy is counted in `missed_trig`. The same block sends 24-bit
configuration words to the ADC over SPI.

`trigger_source` synchronises the two external triggers (line and macro-pulse)
and detects their rising edges, or generates both internally (a line every
`INT_PERIOD` clocks, a macro-pulse every `INT_MP` lines). It counts line
triggers; that count is the time stamp in packet headers.

## From samples to lines

The ADC converts on every clock regardless of what the chip is doing; only
samples marked by the chip's data-valid output are pixels. Data valid reaches
the FPGA earlier than the matching samples, because the ADC has a pipeline, so
`adc_data_reader` delays it by `DV_DELAY` clocks (0–15, default 2). Each rising
edge of the delayed data valid starts a line; the 16th beat carries `last`. A
burst shorter than a line is counted in `short_lines` and passed on without
`last`.

## Storage path

**Framing and admission.** `framer_dropper` watches for a macro-pulse trigger
while acquisition is enabled. On the trigger it assigns the next bunch number
and checks that the ring buffer has room for the whole packet
(1 + 16·`NUM_LINES` beats). If so, it queues a header beat at once and then
passes the next `NUM_LINES` complete lines; the last beat of the last line
carries `last`. If not, the whole bunch is dropped and counted, so the buffer
never holds a partial bunch. Macro-pulse triggers during a capture are ignored
and counted. The line stream cannot be stopped, so a 4-beat skid FIFO sits in
front of the memory path; losing a beat there is counted in `overflow` and
should never happen because of the admission check.

Header beat (`data_hdr_t`): type `0xD0` in bits [255:248], bunch number in
[95:64], line count in [63:32], time stamp in [31:0].

**DDR3 ring buffer.** `fifo_subsystem` is a packet FIFO whose storage is
`BUF_BEATS` = 983,040 beats (30 MiB) of DDR3 at `BUF_BASE`. Its write side
collects beats in a 64-beat staging FIFO and issues AXI4 bursts of up to 16
beats that never cross a 16-beat boundary; a partly filled burst is flushed
after 4 idle clocks. Space is reserved when a burst is issued and data becomes
readable only when the burst's write response arrives, so the read side can
never overtake the write side. A small FIFO of packet lengths keeps packet
boundaries, so the read side can restore `last` without storing it in DDR3.
The read side issues bursts only when its 64-beat output FIFO has room for
them. `space_beats` (free, including reservations) feeds the admission check;
`used_beats` and `stored_packets` are reported as status.

`axi_switch` joins the FIFO's write and read masters onto the single DDR3
port. Writes are granted round-robin and held for a whole burst (address and
data); reads are arbitrated separately. The master index travels in the upper
AXI ID bits, which is how responses find their way back.

**Read-out on request.** `frame_reader` passes nothing until a host sends a
read request for *n* packets; it then lets exactly *n* whole packets through
to the link. Requests add up.

## The bulk link protocol

The bulk link carries 256-bit beats with `valid/ready/last`. The first byte of
the first beat ([255:248]) gives the packet type:

| type | direction | content |
|------|-----------|---------|
| `0xD0` | to host | stored bunch: header beat, then lines |
| `0xA1` | to device | register write: tag [247:240], strobes [99:96], address [95:64], data [63:32] |
| `0xA2` | to device | register read: tag, address |
| `0xA3` | to host | register response: tag, AXI response [101:100], address, read data |
| `0xB1` | to device | read request: number of packets [31:0] |

`axis_mux_demux` shares the transmit side between stored bunches and register
responses, one whole packet at a time, round-robin. On the receive side it
routes register packets to `axi_mm_to_stream` and read requests to
`frame_reader`; any other packet is discarded and counted. `axi_mm_to_stream`
performs one AXI4-Lite access per register packet and answers with one
response beat carrying the same tag.

## Register map

`axil_switch` gives each AXI4-Lite slave a 4 KiB window (slave *i* at
0x1000·*i*); other addresses answer DECERR, and reads return 0xDEADBEEF.

**0x0000 register file**

| offset | name | meaning |
|--------|------|---------|
| 0x00 | ID | 0x484F4C44 |
| 0x04 | CTRL | [0] acquisition enable, [1] internal triggers, [2] front end enable, [3] baseline tracking |
| 0x08 | NUM_LINES | lines per bunch (default 2700, limited to 2700) |
| 0x0C | DV_DELAY | data-valid delay (default 2) |
| 0x10 | INT_PERIOD | internal line period in clocks (default 24) |
| 0x14 | INT_MP | internal macro-pulse period in lines (default 4000) |
| 0x18 | FE_TIMING | [7:0] t_reset (4), [15:8] t_integ (12) |
| 0x1C | ADC_SPI | writing sends a 24-bit word to the ADC |
| 0x40 | REF_ADDR | pixel index for table writes, increments after each write |
| 0x44 | BG_REF | write the baseline of pixel REF_ADDR |
| 0x48 | FRAC_REF | write the gain of pixel REF_ADDR |
| 0x80+4i | STATUS i | see below |

Status words: 0 bunch number, 1 bunches stored, 2 {overflowed beats, bunches
dropped}, 3 beats in the buffer, 4 packets sent to clients, 5 {missed
triggers, short lines}, 6 line triggers, 7 {ignored macro-pulses, discarded
link packets}, 8 requested packets not yet sent, 9 LLRF packets, 10 {LLRF
records dropped, packets in the buffer}, 11 lines read out, 12 ADC SPI busy,
13 packets sent on the link, 14 free beats in the buffer, 15 zero.

**0x1000 PLL controller:** 0x0 write sends a 32-bit SPI word, 0x4 {lock[1:0],
busy}, 0x8 the word shifted in from MISO.
**0x2000 UART** (8N1, to the power-supply controller): 0x0 transmit byte,
0x4 receive ([8] valid; reading pops), 0x8 status ([3] overrun, [4] framing
error, both sticky, write 1 to clear), 0xC clocks per bit (default 868).
**0x3000, 0x4000 I2C** (bias DACs): 0x0 command ([6:0] address, [15:8] first
byte, [23:16] second byte, [24] send two bytes), 0x4 {NACK, busy}, 0x8 clocks
per quarter bit (default 250). The masters only write.

## BBF path: beam parameters per line

This path works on every line from the ADC data reader, whether stored or not,
one beat per clock with no back-pressure.

1. **Baseline.** `background_subtractor` computes max(0, *x* − *b*) per pixel
   from a 256-entry table *b*. The host loads it; with tracking enabled, lines
   taken without laser light (`dark_line` high) pull each entry 1/16 of the way
   towards the dark value, so a drifting baseline is followed.
2. **Normalisation.** `fraction_calculator` multiplies each pixel by a Q12 gain
   (4096 = 1) and saturates at 65535. The host computes the gains (for
   example the inverse of a reference spectrum), which avoids 16 dividers.
3. **Moments.** `statistical_module` accumulates M0 = Σ*x*, M1 = Σ*i·x* and
   M2 = Σ*i²·x* over the 256 pixels, 16 products per clock. At the end of the
   line two pipelined dividers (24 quotient bits) give M1·256/M0 and
   M2·256/M0, so the next line can start immediately. Outputs, all Q8:
   centre of mass *c*, spread (variance) M2·256/M0 − *c*²/256, and mean
   M0 (which is Σ*x*/256 in Q8). A line with M0 = 0 gives zero. The result
   appears 27 clocks after the line's last beat.
4. **Link.** `low_latency_link` sends each record as five 32-bit words:
   {0xBBF0, line number}, centre, spread, mean, CRC-32 of the first four
   (polynomial 0x04C11DB7, initial value all ones, MSB first, result
   inverted), with start and end markers. A one-entry buffer absorbs a record
   that arrives while a packet is being sent; a further one is dropped and
   counted. At one record per 16 clocks the link must accept about one word in
   three.

## Parameters and sizes

| item | value | origin |
|------|-------|--------|
| pixels per line | 256 | required by the application |
| ADC resolution / storage width | 14 / 16 bit | required by the application |
| lines per bunch | up to 2700 | required by the application |
| one stored bunch | 2700 × 512 B = 1.38 MB (43,201 beats with header) | follows from the above |
| ring buffer | 30 MiB = 983,040 beats, 22 full bunches | buffer size of the board design |
| pixels per clock | 16 | this design |
| DDR3 port | AXI4, 256-bit data, 32-bit address, 4-bit ID | this design |
| burst length | up to 16 beats | this design |

The ring holds 22 full-size bunches. At a 10 Hz host read rate, 13.8 MB/s
leave the device, far below the link capacity. Storing at full line rate
needs one beat per clock into DDR3 (18.4 Gb/s at 72 MHz); whether a given
memory controller sustains this has to be checked for that controller.

## Where this design departs from the original system

* The header is added when a bunch is captured and stored with it, not
  prepended just before transmission. The content is the same.
* The DDR3 data path is 256 bits wide at the user clock; the 64-bit memory
  interface is left to the memory controller.
* Everything runs on one clock. A real board will need clock-domain crossings
  at the memory controller and link cores.
* Packet formats, the request protocol, the register map, the admission rule,
  the baseline tracking rule, the normalisation by multiplication and all
  fixed-point formats are this design's own.
* The DDR3 controller, the Aurora 8b/10b cores, the transceivers and all
  analog parts of the board are not included.

## Verification

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`) that
ends with a line `TB_RESULT checks=N failures=M`, and each testbench was shown
to fail on a deliberately broken copy of its block. Behavioural models used
by the testbenches: `ddr3_axi_model` (AXI4 memory with random stalls),
`axil_mem_model` (AXI4-Lite memory).

`tb_hold_top` runs the whole design at its default sizes (2700 lines per
bunch, 30 MiB ring) for about 3.7 million clocks. It models the readout chip
and ADC, configures the system over the link, checks the first 200 LLRF
records against centre, spread and mean computed in the testbench and the CRC
of all of them, fills the ring buffer until a bunch is dropped, reads all
stored bunches back and checks every header and pixel, provokes a short line,
a discarded link packet, baseline tracking, ignored macro-pulses and missed
triggers, and compares the status words with the blocks' counters. It reports
how often each of these happened and fails if any did not.

To run a testbench with Verilator:

```
verilator --binary --timing -Wno-fatal --top-module tb_hold_top \
    -y rtl -y tb -Irtl -Itb +libext+.sv rtl/hold_pkg.sv tb/tb_hold_top.sv
./obj_dir/Vtb_hold_top
```

The full-size top-level test takes about 25 seconds; the block tests take
well under a second each.

## Files

`rtl/hold_pkg.sv` holds the shared constants and types (packet layouts, AXI
and AXI4-Lite request/response structs, the statistics record). `sync_fifo`,
`spi_master`, `axil_regif` (AXI4-Lite slave front end) and `div_pipe`
(pipelined divider) are helpers used by several blocks. Every file begins
with a description of its function, interface and timing.
