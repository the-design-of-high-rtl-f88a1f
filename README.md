# FPGA-to-ARM11 memory-bus link for a small nuclear-physics DAQ

A small data-acquisition system for nuclear experiments has an FPGA that
collects ADC/TDC data from the front-end electronics (FEE) and an ARM11
processor (Samsung S3C6410) that forwards it over TCP/IP. The FEE can produce
up to 8 MB/s, and the link between the two chips must carry that. A serial
port (I2C, SPI) or a GPIO-based parallel port is far too slow for this.
This design puts the FPGA on the processor's external memory bus instead. To
the processor's SROM controller (SROMC) the FPGA looks like a 16-bit memory
in bank 4. Each read of that memory returns the next word of a 32 KB FIFO in
the FPGA, so event data moves at memory-access speed. With a 50 MHz FPGA
clock, an access every 40 ns is the limit, which is 2 bytes / 40 ns = 50 MB/s.
The FPGA raises an interrupt after a preset number of events, so the
processor reads data in batches instead of polling.

This RTL is the FPGA side of that link.

```
             ARM11 SROMC, bank 4                          FPGA (clk = 50 MHz)
  ADDR[15:0] ───────────────────────────▶ (not decoded)
  CSN4, OEN, WEN ───────────────────────▶ srom_strobe_conv ── rd_req ──┐
  DATA[15:0] ◀──────── srom_data_o/oe ───────────────┐     ── wr_req ──┤
  DATA[15:0] ───────── srom_data_i ─────▶ (wr_data) ─┼──────────┐      │
                                                     │          ▼      ▼
  FEE stream (fee_data/valid/last/ready) ───────────────▶ write mux ─▶ daq_fifo (16384 x 16)
                                                     └───────────────── q
  IRQ ◀──────────────────────── event_irq ◀── events completed (fee_last accepted)
```

## Files

| file | contents |
|---|---|
| `rtl/daq_pkg.sv` | bus widths, FIFO size, word type |
| `rtl/srom_strobe_conv.sv` | turns the bank-4 strobes into synchronised read/write events |
| `rtl/daq_fifo.sv` | 32 KB show-ahead FIFO (block-RAM array plus output register) |
| `rtl/event_irq.sv` | multi-event interrupt counter |
| `rtl/daq_fpga_top.sv` | the FPGA side of the link: all of the above wired together |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_daq_fpga_top` and `tb_daq_rates` run the whole design at its default sizes |

## From bus strobes to FIFO clocks (the hard part)

The FIFO is a clocked memory, but the SROMC has no clock on its pins. A
bank-4 access shows only as CSN4 (chip select), OEN (read) or WEN (write)
going low for a programmed number of HCLK cycles (133 MHz). The
controller's timing parameters set the access shape: Tacs (address to
chip select), Tcos (chip select to strobe), Tacc (strobe width), Tcoh, Tcah
and Tacp (page mode). The link is meant to run with all of them at 0 except
Tacc = 3, in normal (non-page) mode. The two FIFO "clocks" are made from the
pins:

    rdclk = ~CSN4 & ~OEN
    wrclk = ~CSN4 & ~WEN

The CSN4 term matters. Other devices share the data and address bus and
their own strobes. Without it, an OEN pulse meant for a flash chip would pop
a word from the FIFO. The data would then be lost and the event stream
shifted.

These combinational products can glitch and are asynchronous to the FPGA.
So they are not used as clocks directly. Each one goes through a two-stage
flip-flop synchroniser on the 50 MHz system clock, and its edges become
one-cycle enables:

* **Read, start-of-access.** `rd_req` is the rising edge of the synchronised
  rdclk. The FIFO is show-ahead, so the word the processor wants is already
  on `srom_data_o` when OEN falls. `rd_req` then consumes it, and the next
  word replaces it 2 to 3 clocks (40–60 ns) after the access started. That
  is after this access has sampled the bus (Tacc ≈ 22.5 ns) and before the
  next access samples it (≥ 40 + 22.5 ns later). The processor must
  therefore latch read data within two system clocks (40 ns) of OEN
  falling. The link's Tacc = 3 setting does this. A much slower Tacc would
  need `SYNC_STAGES` raised.
* **Write, end-of-access.** `wr_req` is the falling edge of the synchronised
  wrclk. The data bus passes through the same synchroniser, and the word
  stored is the sample from the last clock in which WEN was seen low. So it
  is taken well inside the window in which the processor holds it.
* **Minimum access.** Every strobe must be low for longer than one system
  clock and high for longer than one, or the synchroniser may miss a
  phase. 40 ns per access (50 MB/s) is therefore a bound, not an operating
  point. The testbenches run at 22 ns low / 21 ns high = 43 ns per word,
  which is 46.5 MB/s. If the SROMC gives less than 20 ns between two
  accesses, they merge into one and a word is lost. Check this for the
  processor's settings.
* **Normal mode only.** In page mode the SROMC keeps OEN low and reads
  several words in a row, one every Tacp. The converter sees that as one
  access and would return a single word. Run the controller in normal mode,
  with one OEN pulse per word.
* `srom_data_oe` is the only combinational path from the pins. It is high
  exactly while CSN4 and OEN are both low, to drive the tristate pad.

## The FIFO

`daq_fifo` holds `DEPTH` = 16384 words of 16 bits (32 KB). It has one clock,
because both of its request inputs are already synchronous to the system
clock. The array has a registered read port, so it maps to block RAM. An
output register in front of it gives show-ahead behaviour: `q` holds the
oldest word whenever `q_valid` is high. When `rdreq` consumes the word, the
next one is loaded in the same clock, so one word per clock is sustained. A
word written into an empty FIFO reaches `q` two clocks later. `usedw`
counts the array plus the output register, and `full` means exactly DEPTH
words. A write when full or a read when empty is ignored, and an assertion
reports it.

## Who writes the FIFO

The front end fills the FIFO through a valid/ready stream.
`fee_last` marks the last word of an event. A bank-4 write by the
processor also pushes a word (the `wrclk` path). When both want the write
port in the same clock, the processor wins: `fee_ready` is low for that
clock and the front-end word waits. `fee_ready` is also low whenever the
FIFO is full, so the front end is stalled, not overrun. The front end must
hold an offered word until it is taken. The top module has an assertion for
this rule.

Two sticky status flags help bring-up: `overflow` (a processor write
found the FIFO full, and the word was dropped) and `underflow` (a processor
read found it empty, and the stale `q` was returned). `fifo_level` gives the
fill level. `rdclk`/`wrclk` are the synchronised strobes, brought out as
test points.

## Multi-event interrupts

`event_irq` counts completed events, that is, accepted words with
`fee_last`. When the count reaches `irq_preset`, it restarts from zero and
`irq` goes high for `IRQ_PULSE` = 8 clocks. The processor's interrupt
handler then reads the batch. On the processor, the handler and the
application use ping-pong (double) buffers. This lets one buffer be filled
while the other is processed, which reduces dead time. A preset of 0 acts
as 1. `event_count` and `irq_count` are status outputs.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `DATA_W` | 16 | data bus width |
| `ADDR_W` | 16 | address bus width (port only) |
| `FIFO_DEPTH` | 16384 | FIFO words (32 KB) |
| `SYNC_STAGES` | 2 | synchroniser flip-flops per strobe (own choice) |
| `CNT_W` | 16 | width of the event preset and counters (own choice) |
| `IRQ_PULSE` | 8 | interrupt pulse length in clocks (own choice) |

## What follows the source design and what does not

Taken from the design: the bank-4 memory mapping, the 16-bit data and
address buses, the rdclk/wrclk equations with the CSN4 check, synchronising
both strobes to the 50 MHz clock, the 32 KB FIFO, the interrupt line and
interrupts after a preset number of events.

Departures from the source design, and choices made where it says nothing:

* The FIFO is single-clock and show-ahead. The source design drives a
  dual-clock FIFO with the converted strobes as clocks, and reads in normal
  mode (`q` one read clock after `rdreq`). The behaviour at the bus is the
  same word order. The show-ahead form makes the read-data timing above
  explicit.
* The synchroniser depth (2), the edges used (read at start, write at end)
  and the write-data sampling.
* The front-end interface, the priority of processor writes over front-end
  data, and the overflow/underflow flags.
* The interrupt is an active-high pulse, and the preset is an input port.
  How the processor sets the preset is not specified; a register written
  over the bus would be a natural extension.
* ADDR is not decoded. The FIFO answers at every address of bank 4.

Not covered by this RTL: the processor and its SROMC, the front-end
electronics and their control, and all processor-side software (interrupt
handler, driver and application ping-pong buffers, threads, TCP/IP).

## Throughput against the system's needs

| case | needed | available in this design |
|---|---|---|
| FEE maximum DAQ rate | 8 MB/s | 46.5 MB/s tested (43 ns access), 50 MB/s bound; 8 MB/s of 4-word events simulated with no front-end stall |
| pulser test: 250 kHz events, 2 MB/s (8 bytes = 4 words per event) | 2 MB/s | simulated at 2.00 MB/s with interrupts every 16 events, no stall |
| buffering while the processor is busy | — | 32 KB = 4 ms of data at 8 MB/s, 16 ms at 2 MB/s |

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl rtl/daq_pkg.sv tb/tb_daq_fpga_top.sv \
          --top-module tb_daq_fpga_top -Mdir obj && obj/Vtb_daq_fpga_top
```

Replace `daq_fpga_top` by `daq_fifo`, `srom_strobe_conv` or `event_irq` for
the module tests. One time unit is 1 ns and the clock period is 20 units.

`tb_daq_fpga_top` runs the whole design at its default sizes in under a
second. It contains bus-functional models of the processor's bank-4
accesses and of a front end that sends 4-word events. The front-end words
carry a sequence number, and the words the processor writes have bit 15 set.
Every word read back is checked against the order in which it was accepted.
Its phases are:

1. a read of the empty FIFO (underflow);
2. write-and-read-back of 0000..0004;
3. accesses with CSN4 high, which must be ignored;
4. interrupt-driven batch reading with an event every 200 clocks (250 kHz);
5. filling all 32 KB (front end stalled), a write to the full FIFO
   (overflow), and a 16384-word drain timed at 43 ns per word;
6. processor writes during a continuous front-end stream (write priority).

It counts each of these mechanisms and fails if any never happened.

`tb_daq_rates` runs the two traffic cases from the table above: 2 MB/s and
8 MB/s. It runs 64 interrupts each, and the processor model needs 5 µs to
enter its handler. It checks that the link carries the offered rate, that
the front end is never stalled, and that every word arrives. At 8 MB/s the
FIFO holds at most 84 words, which shows how much headroom the 32 KB buffer
leaves for processor-side delays.
