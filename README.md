# IMONY photon-counting acquisition logic

IMONY is an optical imager built for very short astronomical time scales, such
as the 33 ms rotation of the Crab pulsar. Its sensor is a 4x4 array of
Geiger-mode avalanche photodiodes (100 um pixels). Each pixel feeds an
amplifier and a comparator, so every detected photon reaches the FPGA as a
digital edge on one of 16 lines. The job of the FPGA logic is to give each of
those edges an absolute time, good to 100 ns, and stream the result to a host
computer. Time comes from a GNSS receiver, which supplies a 10 MHz clock, a
pulse per second (PPS) and NMEA text sentences that name the UTC second.

This repository holds synthesizable SystemVerilog for that logic, plus
self-checking testbenches. It follows the published description of the
instrument's prototype read-out: an Artix-7 board, SiTCP for networking, a
10 MHz GNSS clock and a 5 ns internal clock. That description fixes the block
structure and the timing scheme. It leaves the widths, formats, buffer sizes
and register map open. Those were chosen here, and each source file says
which parts of it are which.

## How a photon gets its time

The time stamp is built from two counters and one text sentence:

* **sub-second counter** (`subsec`, 24 bits): counts 100 ns ticks and is
  cleared by every PPS pulse. Its value is the time since the last full UTC
  second, in units of 100 ns.
* **PPS counter** (`pps_count`, 24 bits): counts PPS pulses. It is cleared
  when the host starts a measurement.
* **NMEA sentence**: the host reads the last complete sentence from registers
  when it starts the run. The sentence gives the UTC of the current second.

For an event stamped `(pps_count, subsec)`, the absolute time is

    UTC(second at start) + pps_count  seconds + subsec x 100 ns

If the start falls between two PPS pulses, the events before the next PPS
carry `pps_count = 0` and a sub-second count that still refers to the second
in progress.

Only one clock runs inside the logic: 200 MHz (5 ns). It is assumed to come
from an FPGA clock manager that multiplies the GNSS 10 MHz. The 10 MHz itself
is not used as a clock. `time_counters` divides the 200 MHz by 20 instead and
gives a one-cycle `tick` every 100 ns. Because the 200 MHz is phase-locked to
the GNSS clock, this tick is as stable as the GNSS 10 MHz. The divider is not
re-aligned by the PPS. A PPS pulse wins over a tick in the same cycle, so the
sub-second counter becomes 0.

Hit lines and the PPS line go through the same `hit_detector`: a
two-flip-flop synchroniser, then a rising-edge detector. Both therefore arrive
three cycles (15 ns) late, and their relative timing is unchanged. The
sampling is at 5 ns, but the recorded resolution is 100 ns. The `tick` splits
time into 100 ns bins. `event_builder` ORs together the hits of all pixels
during a bin. At the bin's end it writes out one event if any pixel fired,
stamped with the counters as they stand at that moment. So:

* several pixels firing in the same bin share one event;
* a pixel firing twice within one bin appears once (the sensor pixel is blind
  for about 100 ns after a discharge anyway);
* the sub-second value of an event for a hit that arrived `d` cycles after
  the PPS is `floor(d/20)` or `floor(d/20) + 1`. Which one depends on the
  phase of the divider against the PPS, which is fixed for a given power-up.
  This is a constant offset of less than one bin. Calibrating against a
  PPS-triggered light pulse removes it.

## Light-curve mode: the event stream

In the observing mode, each event is a 64-bit word (`imony_pkg::event_t`):

| bits  | field       | meaning                                  |
|-------|-------------|------------------------------------------|
| 63:48 | `hits`      | bit *i* set: pixel *i* fired in this bin |
| 47:24 | `pps_count` | PPS pulses since measurement start       |
| 23:0  | `subsec`    | 100 ns ticks since the last PPS          |

Events go into `event_fifo`, 1024 words deep. `tcp_tx_serializer` takes them
out and writes them to SiTCP's TCP transmit port, one byte per clock, most
significant byte first, with no framing. It waits while SiTCP signals full,
and it takes no word while the TCP connection is closed. If the FIFO is full
when an event arrives, the event is dropped and counted; the host can read
this count (register `DROPS`). The FIFO holds 1024 x 100 ns = 102 us of the
worst case (an event in every bin). At typical sky rates, though, the
100BASE-T link drains it much faster than it fills: 2 Mbit/s of raw data is
about 31 000 events/s, against about 1.5 million events/s that 100 Mbit/s can
carry.

## Scaler mode and the dark scan

Scaler mode is a health check that gives a count map without any event data.
The host sets `EXPOSURE` (in 100 ns ticks) and writes the scaler-start
command. `scaler` then clears 16 32-bit counters and counts each pixel's hits
until the exposure has elapsed. It raises `done` and holds the map for the
host to read at `COUNTS`. The exposure window starts on the cycle after the
command and ends with the last tick. It is therefore between (EXPOSURE-1) and
EXPOSURE ticks long: the first tick period is partly cut.

A dark scan measures the dark-count rate of all pixels against the comparator
threshold, so that a common threshold can be picked on the plateau. It is a
loop on the host: write the threshold DAC, run one exposure, read the map,
repeat. The logic provides each step; it has no scan sequencer of its own.

## Slow control (RBCP register map)

SiTCP passes UDP register accesses on to the logic as a byte-wide local bus
(RBCP): a one-cycle `rbcp_we` or `rbcp_re` with a 32-bit address. `rbcp_regs`
answers every access on the next cycle with `rbcp_ack`, and with `rbcp_rd`
for a read. Multi-byte values are little endian. An address with any of bits
31:8 set reads 0 and ignores writes.

| address   | name       | access | content |
|-----------|------------|--------|---------|
| 0x00      | CTRL       | rw | bit0 mode (0 light-curve, 1 scaler); bit1 run |
| 0x01      | STATUS     | ro | bit0 SPI busy, bit1 scaler busy, bit2 scaler done, bit3 events dropped, bit4 FIFO empty, bit5 UART framing error seen, bit6 FIFO full |
| 0x02      | CMD        | wo | write-1 pulses: bit0 scaler start (scaler mode only), bit1 send threshold DAC word, bit2 send HV DAC word, bit3 clear framing-error flag |
| 0x04-0x07 | EXPOSURE   | rw | scaler exposure, 100 ns ticks |
| 0x08-0x09 | THR_CODE   | rw | threshold DAC code |
| 0x0A-0x0B | HV_CODE    | rw | HV DAC code |
| 0x0C      | THR_CMD    | rw | command byte sent before the threshold code |
| 0x0D      | HV_CMD     | rw | command byte sent before the HV code |
| 0x10-0x12 | PPS        | ro | PPS counter |
| 0x14-0x16 | SUBSEC     | ro | sub-second counter |
| 0x18-0x1B | DROPS      | ro | events dropped on a full FIFO (saturating) |
| 0x1C-0x1D | LEVEL      | ro | FIFO fill level |
| 0x20      | NMEA_LEN   | ro | length of the last NMEA sentence |
| 0x21      | NMEA_SEQ   | ro | number of sentences received (wraps) |
| 0x40-0x7F | COUNTS     | ro | scaler count of pixel *c* at 0x40 + 4*c* |
| 0x80-0xFF | NMEA       | ro | bytes of the last NMEA sentence |

A light-curve measurement starts when a CTRL write turns recording on: `run`
set with light-curve mode, where before `run` was clear or the mode was
scaler. This sends a one-cycle `meas_start`, which clears the PPS
counter. Events are recorded while `run` stays set. Multi-byte counters are
read one byte per access and are not frozen in between. A value that changes
during the reads (PPS, SUBSEC, LEVEL) can therefore tear; read it twice if
that matters.

## GNSS serial line and DACs

`uart_rx` receives the NMEA stream as 8N1 at 9600 baud. That is the usual
GNSS default, not something the paper gives; change `BAUD` for other
receivers. `nmea_capture` keeps sentences from `$` to line feed in two
128-byte buffers that alternate. One is being filled while the other holds
the last complete sentence. The host reads the complete one and never sees a
half-written copy.

`spi_master` drives both DACs from one SPI bus with two chip selects: 0 for
the comparator-threshold DAC, 1 for the HV DAC. The paper does not name the
DAC parts. The frame chosen here is 24 bits in SPI mode 0, MSB first, at a
10 MHz clock: the command byte from THR_CMD/HV_CMD, then the 16-bit code. For
another part, adapt `BITS` and the command bytes.

## Module list

| module | role |
|--------|------|
| `imony_pkg` | shared constants, event struct, mode enum |
| `hit_detector` | synchroniser and rising-edge detector for hit lines and PPS |
| `time_counters` | 100 ns tick, sub-second counter, PPS counter |
| `event_builder` | 100 ns binning of hits into events |
| `event_fifo` | event buffer with drop counter |
| `tcp_tx_serializer` | events to SiTCP TCP bytes |
| `scaler` | per-pixel count map over an exposure |
| `uart_rx` | NMEA serial receiver |
| `nmea_capture` | last-sentence double buffer |
| `spi_master` | DAC writes |
| `rbcp_regs` | register map on the SiTCP RBCP bus |
| `imony_daq_top` | the complete acquisition logic |

Outside the RTL, and seen only as ports of `imony_daq_top`: the SiTCP core
and the Ethernet PHY, the GNSS receiver, the clock manager that makes 200 MHz
from 10 MHz, the two DACs with the HV supply, and the analog frontend
(sensor, amplifiers, comparators). All logic uses one clock and a synchronous,
active-high reset.

Defaults follow the instrument where it fixes them: 16 channels, 5 ns clock
(`CLK_HZ` = 200 MHz) and 100 ns stamp (`CLK_DIV` = 20). The rest are this
design's choices: `BAUD` 9600, `FIFO_DEPTH` 1024, `SPI_HALF_DIV` 10, and
24-bit counters, which run for 194 days of PPS and 1.68 s without a PPS
before wrapping.

## Where this design departs from, or adds to, the instrument description

* Event format, FIFO depth, counter widths, register map, SPI frame, UART
  settings and NMEA buffering are all this design's own. The published
  description does not give them.
* The 10 MHz count is an enable derived from the 200 MHz clock, not a
  separate clock domain. This gives the same counts without a clock-domain
  crossing, assuming the 200 MHz is locked to the GNSS 10 MHz.
* Hits are grouped per 100 ns bin into one event per bin, not one record per
  photon. The time information is the same at the 100 ns resolution, and the
  data volume is smaller when several pixels fire together.
* The dark scan is left to the host (see above).
* The high-voltage supply is set only through its DAC; no separate HV enable
  line is provided.

## Verification

Each module has a testbench `tb/tb_<module>.sv`. It compares the module with
a model written from the behaviour described above, counts checks and
failures, ends with a line `TB_RESULT checks=N failures=M`, and has a
watchdog. `tb_imony_daq_top` runs the whole logic at its default sizes. Its
models of the GNSS receiver, DACs, comparators and SiTCP take it through an
NMEA capture, both DAC writes, a two-threshold dark scan in scaler mode, a
light-curve run with PPS pulses and multi-pixel hits under random TCP
back-pressure, a FIFO overflow with the connection closed, and a stop. It
checks every decoded event and counts each of these mechanisms. It takes
about 10 s of simulation.

`tb_crab_lightcurve` is an observation in real time: 1.05 s of photons on the
full-size logic, with PPS pulses 1 s apart. Photons are a 15 000 counts/s
background over all pixels, plus a pulse of 30 photons per rotation on the
four central pixels at the Crab's 29.59 Hz. A pixel is blind for 100 ns after
each photon. The host side of the test decodes the TCP stream and matches
every pixel bit to a photon it drove, in the same or the previous 100 ns bin.
It checks that the sub-second counter reaches 10^7 - 1 within a second. It
folds the events at the pulsar frequency and requires the on-pulse phase
window (0.99-1.01) to exceed the off-pulse level (0.7729-0.8446) by more than
5 sigma, and the stream to stay below 2 Mbit/s. It typically reaches about
54 sigma at 1.0 Mbit/s. It needs about two minutes of simulation.

`tb_dark_scan` runs a dark scan on the full-size logic: 12 threshold steps
from 10 to 120 (read as mV), with a 10 ms scaler exposure at each. A
threshold DAC model decodes each code from the SPI frame. A comparator model
then makes Poisson dark pulses whose rate falls exponentially with
threshold, from about 10^4 counts/s, with one pixel three times noisier
than the rest. Every count of every map read back must equal the pulses
driven on that pixel. It needs about 15 s.

To simulate with Verilator 5, for example the top-level test:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
        rtl/imony_pkg.sv tb/tb_imony_daq_top.sv --top-module tb_imony_daq_top
    ./obj_dir/Vtb_imony_daq_top

Replace the testbench name for any other block. To lint the synthesizable
part:

    verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/imony_pkg.sv rtl/imony_daq_top.sv
