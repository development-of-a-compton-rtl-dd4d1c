# Concurrent readout for a two-detector CZT Compton imager

A Compton imager finds where a gamma-ray source is from photons that scatter
once in one detector and are then absorbed in a second one. Offline software
computes the scattering angle from the two energy deposits. It then draws a
cone from the two hit positions. The hard part for the readout electronics is
the pairing: the two halves of one photon must be recognisable as belonging
together. Each detector also counts thousands of unrelated background hits.

This RTL is the programmable-logic readout for such an imager. The imager
uses two 16x16-pixel CZT detector modules at right angles: "Det V" is the
scatterer and "Det H" the absorber. The readout runs on a Zynq-7000 FPGA
(PYNQ-Z2 board). Its main idea is **concurrent polling in shared read slots**:

* A slot timer divides time into read slots of 75 clocks. At the 10 MHz
  system clock that is 7.5 us, the time one 26-bit detector frame takes to
  read.
* At the first clock of each slot, every enabled detector starts an SPI read
  in the same cycle.
* Every event read in a slot gets the 32-bit timestamp of that slot's first
  clock.

So a photon that scatters in one detector and is absorbed in the other shows
up as two event words with equal timestamps. Offline selection looks for
exactly that. A serial readout, where one detector is polled after the other,
would give the two halves different stamps. It would also widen the
coincidence window.

Everything after the SPI readers is plain data movement. Each event becomes a
64-bit word. The words are merged into one stream, buffered, and handed to
the AXI DMA, which writes them into processor memory. Software starts and
stops the acquisition through a small register block.

```
             +------------------+   start (all detectors, same cycle)
  clk ------>| timestamp_counter|--ts--+----------------------------+
             +------------------+      |                            |
                                 +-----v---------+ slot_ts          |
                      run ------>| read_scheduler|-------+          |
                                 +---------------+       |          |
  det_cs_n/sclk/miso[0] <-> czt_spi_reader -> event_framer (ID 0) --+
  det_cs_n/sclk/miso[1] <-> czt_spi_reader -> event_framer (ID 1) --+--> event_merger
                                                                              |
                      m_axis_* (64-bit, TLAST per 256 words)  <-- trace_buffer
                      s_axil_* (control, status, counters)    <-> daq_csr
```

## Word formats

Each detector module hands out one **native frame** per read: 26 bits, most
significant bit first. The bit positions below follow the published frame
diagram:

| bits   | field    | notes |
|--------|----------|-------|
| 25     | exist    | 1 if the detector had an event to report |
| 24..17 | pixel ID | 0-255, one of the 16x16 pixels |
| 16..5  | PHA      | 12-bit pulse height; 4095 means "at or above full scale" |
| 4..1   | reserved | ignored |
| 0      | parity   | checked, see below |

The prose description of the same frame names 8 pixel bits, 12 PHA bits,
5 reserved bits and a parity bit, with no exist bit. The diagram's bit numbers
are used here. If a real module follows the prose instead, change the
`native_frame_t` struct in `czt_pkg`. The parity convention is not published.
This design takes the parity bit to make all 26 bits even (`parity =
^frame[25:1]`). A frame that fails the check is still stored, because the
data is kept and cleaned offline. The failure is counted in a register.

Every event leaves the readout as a **64-bit event word**:

| bits   | field       | content here |
|--------|-------------|--------------|
| 63..32 | timestamp   | clock ticks since reset at the start of the read slot |
| 31..26 | reserved    | 0 |
| 25..24 | detector ID | index of the detector port (0, 1, ...) plus `DET_ID_BASE` |
| 23..16 | pixel ID    | from the frame |
| 15..13 | reserved    | 0 |
| 12..0  | PHA         | 12-bit PHA, zero-extended (bit 12 is always 0) |

The published layout gives PHA a 13-bit field for a 12-bit value, so it is
zero-extended. One timestamp tick is 0.1 us. The count wraps every
2^32 ticks, about 7.2 minutes. Software that handles runs of hours must
add 2^32 each time the stamp steps backwards. The hardware does not extend
the count.

## The read slot

`read_scheduler` keeps a slot counter that is held at 0 while `run` is low.
While `run` is high, it raises `start` for one cycle:

* in the first cycle of `run`;
* then every `READ_CYCLES` = 75 cycles.

In the `start` cycle it copies the live timestamp into `slot_ts`. The value
holds for the whole slot. Each enabled `czt_spi_reader` (`start &&
det_en[d]`) then runs one SPI read:

| clock edge after the start strobe | what happens |
|---|---|
| 0 | `cs_n` falls; the detector puts bit 25 on MISO |
| 1 | SCLK rises (end of one setup half-period) |
| 2, 4, ... 52 | MISO sampled at the end of each SCLK-high half-period, then SCLK falls; the detector moves to the next bit on that falling edge |
| 53 | `cs_n` rises, the frame and parity result are registered and `frame_valid` goes high for one cycle; the reader is idle again |
| 54 | the framer takes the frame; the event word is in its output register (`ev_valid`) from here |

SCLK is clk/2, so 5 MHz at a 10 MHz clock. The general timing is
`SCLK_HALF` clocks per half-period. The framer then takes the frame at edge `2*SCLK_HALF*26 + 2`.
The top refuses at elaboration a `READ_CYCLES` shorter than that.
The paper gives only the 7.5 us per read. The SPI mode, SCLK rate and setup
time are this design's choices, because the module's serial protocol is not
published.

MISO is sampled without a synchroniser. The detector boards are clocked from
the same 10 MHz clock that drives this logic. If the board clock is ever
derived differently, add a two-flop synchroniser and one more setup
half-period.

## From frames to the DMA stream

* **event_framer** (one per detector). It drops frames with exist = 0, which
  is most polls, since detectors see tens of events per second and are polled
  133,333 times per second. It builds the event word from the frame,
  `slot_ts` and its fixed detector ID. It holds the word in a one-entry
  register with valid/ready. If the next event comes while that register is
  still full, the new event is lost. The framer then pulses `drop_pulse`. The
  register can only stay full if the trace buffer behind it is full.
* **event_merger**. Round-robin arbitration over the framers, one word per
  cycle, with no added latency. A coincident pair arrives in the same cycle.
  The pair leaves as two consecutive words. Which one goes first depends on
  which detector was granted last.
* **trace_buffer**. A synchronous FIFO of `DEPTH` = 1024 words in a memory
  array, plus the AXI4-Stream output register, so it holds 1025 words in all.
  `m_axis_tlast` is set on every 256th word (`PACKET_WORDS`), so each DMA
  transfer ends after a fixed number of events. When the FIFO is full,
  `in_ready` drops. Back-pressure then reaches the framers, which count their
  losses.

The stream obeys the AXI4-Stream rule that TDATA and TLAST stay stable while
TVALID is high and TREADY is low. An assertion checks this. Other assertions
check that the merger grants at most one input, that SCLK only toggles under
chip-select, and that a slot never starts while a reader is still busy.

## Registers (AXI4-Lite, `daq_csr`)

| offset | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] run, [NUM_DET:1] detector enable; write [31]=1 to clear all counters |
| 0x04 | STATUS | ro | [15:0] trace-buffer level, [16] run |
| 0x08 | TIMESTAMP | ro | live 32-bit timestamp |
| 0x10 + 4d | EVENTS[d] | ro | events (exist = 1) read from detector d |
| 0x20 + 4d | PARITY[d] | ro | of those, frames with a parity error |
| 0x30 + 4d | DROPPED[d] | ro | events from detector d lost to a full buffer |

A typical run looks like this:

1. Write 0x8000_0000 to CTRL to clear the counters.
2. Arm the DMA.
3. Write 0x7 to CTRL to run with both detectors.
4. Drain the DMA buffers.
5. Write 0 to CTRL to stop.

Clearing `run` lets a read already in progress finish. Unused offsets read 0.
WSTRB is ignored. Both responses are always OKAY.

## What follows the published setup and what does not

From the published setup:

* two detectors read concurrently;
* the 26-bit frame and 64-bit word layouts;
* the 2-bit detector ID;
* a 32-bit timestamp counting ticks of a 10 MHz clock since power-on;
* 7.5 us per read;
* a trace buffer in the programmable logic feeding the AXI DMA;
* control from the processor side.

Choices made here, because the published description does not settle them:

* the SPI timing and mode;
* the parity convention;
* stamping each event with the start of its read slot;
* dropping empty (exist = 0) frames in hardware;
* the buffer depth and packet length;
* the drop-newest policy when full;
* round-robin merging;
* the register map and counters;
* detector d getting ID d. On the original bench, Det H sits on detector
  board 1 and Det V on board 2, so port 0 = Det H and port 1 = Det V.

Not built:

* The CZT detector modules, the LVDS-to-LVTTL converters, high voltage and
  power: analog parts or bought-in modules.
* The Zynq processor system, DDR memory, DMA engine and Ethernet: hard or
  vendor blocks. The top brings out the AXI4-Lite slave and AXI4-Stream
  master that they connect to.
* The Pmod IO processor and the interrupt controller shown in the original
  block diagram: vendor IP. Here the SPI runs in plain logic.
* Loading the detectors' threshold (LLD, 20 keV in the experiments) and
  noisy-pixel masks. The module's command format is not published.
* Everything downstream, which is software: gain/offset calibration,
  coincidence selection, the 356 keV energy window, back-projection and
  MLEM imaging.

## Capacity against the measurements

Each detector is polled 133,333 times per second. The measured rates are far
below that: 35-65 counts/s in the scatterer, about 15 counts/s in the
absorber, and a few hundred counts/s when a pixel turns noisy. The merged
stream needs at most 2 words every 75 clocks against 1 word per clock out of
the buffer. The buffer only fills if the DMA stops taking data. A 5-hour
run at 80 counts/s is 1.44 million words, 11.5 MB, which is small next to
the board's 512 MB DDR3. The resolving time for coincidences is one slot,
7.5 us. This is the chance-coincidence window. Running the detectors faster
(up to 30 MHz is supported by the modules) shortens it: lower `READ_CYCLES`
in proportion to the per-read time at the new rate.

## Parameters

| parameter | default | where |
|---|---|---|
| `NUM_DET` | 2 | top, merger, registers (at most 4 with the 2-bit ID) |
| `READ_CYCLES` | 75 | top, scheduler |
| `SCLK_HALF` | 1 | top, reader |
| `DEPTH` | 1024 | top, trace buffer |
| `PACKET_WORDS` | 256 | top, trace buffer |
| `DET_ID_BASE` | 0 | top |

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/czt_pkg.sv \
          tb/tb_compton_daq_top.sv --top-module tb_compton_daq_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. Most simulations take under a
second.

* `tb_compton_daq_top` runs the whole readout at its default sizes against
  two behavioural detector models (`tb/czt_detector_model.sv`). It has four
  phases:
  1. coincident pairs, singles and parity errors;
  2. detector 1 disabled and re-enabled;
  3. run stopped;
  4. the stream stalled until the buffer overflows.

  It keeps its own copy of every frame and its own tick count. From these it
  predicts each output word. It checks:
  * the 75-cycle polling period;
  * TLAST positions;
  * that the words missing equal the DROPPED counters;
  * the EVENTS and PARITY counters.

  It prints how often each of these mechanisms occurred.
* The block testbenches are `tb_timestamp_counter`, `tb_read_scheduler`,
  `tb_czt_spi_reader`, `tb_event_framer`, `tb_event_merger`,
  `tb_trace_buffer` and `tb_daq_csr`. Some of them shrink sizes, such as a
  16-word buffer or three merger inputs, to reach corner cases quickly.
* `tb_workload_ba133` runs the readout at its default sizes at the count
  rates measured in the Ba-133 imaging runs. It uses scatterer rates of 35,
  50 and 65 counts/s and an absorber rate of 15 counts/s, with one absorber
  count in ten being a true scatter/absorb pair. A fourth case adds a noisy
  pixel at 300 counts/s. All rates are multiplied by 40 to get statistics in
  0.25 s of simulated time per case. The test checks that:
  * every event arrives intact;
  * every pair carries one timestamp;
  * nothing is dropped;
  * full-scale (PHA 4095) events are kept.

  It takes a few seconds.
* `tb/axil_master_bfm.sv` is a small AXI4-Lite master used by the register
  and end-to-end tests.

## Files

* `rtl/czt_pkg.sv`: frame and word structs, widths, parity and packing
  functions.
* `rtl/timestamp_counter.sv`, `rtl/read_scheduler.sv`,
  `rtl/czt_spi_reader.sv`, `rtl/event_framer.sv`, `rtl/event_merger.sv`,
  `rtl/trace_buffer.sv`, `rtl/daq_csr.sv`: the blocks above.
* `rtl/compton_daq_top.sv`: the top level.
