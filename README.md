# Timestamp acquisition and stimulus system

This is a small logic design that records *when* pulses arrive and *plays back* analog stimuli
in step with an external clock. It was made for neuroscience experiments, where up to six
spiking-neuron channels are timestamped at 1 µs resolution while four analog outputs drive a
stimulus (for example a visual display) frame by frame. Everything runs on one 50 MHz clock
and fits a small CPLD. The only outside parts are a JTAG-UART link to the host, an 8-bit
32K×8 asynchronous SRAM, and a MAX5134 four-channel 16-bit SPI DAC.

Two data streams pass through the design. They share a single external SRAM, which is split into
two 16 KiB byte FIFOs:

```
 acq_i[5:0] ─► async_pulse_sync ×6 ─► synchronizer ─► funnel ─► sram_fifo (out) ─► tx byte stream
                         │ input 0        (flags,timestamp)  40→8 bit     │ client 1
                         ▼                                               sram_split ─► sram_ctrl ─► SRAM pins
 rx byte stream ─► cmd_handler ─► sram_fifo (in) ─► unfunnel ─► dac_sched ─► dac_ctrl ─► SPI + nLDAC
                      │ start            │ client 0      8→24 bit   load on input-0 pulse
                      ▼
                 started ──► synchronizer, dac_sched          error strobes ─► error_led ─► err_o / led_o
```

The top module is `acq_system` (`rtl/acq_system.sv`). Its ports are plain signals: the six
inputs, a valid/ready byte stream in each direction for the host link, the SRAM pins (with the
tri-state data bus split into `sram_dout_o`, `sram_doe_o` and `sram_din_i`), the four DAC pins,
`started_o`, four sticky error flags and four blinking LEDs.

## Host protocol

**Device to host: records.** Each record is 5 bytes long and is sent first byte first:

| byte | content |
|------|---------|
| 0 | channel flags: bit *i* set if input *i* had a rising edge during the period (bits 7:6 are 0) |
| 1–4 | timestamp, most significant byte first |

The timestamp counts periods of `UPDATE_DIV` clock cycles since the start command. With the
default of 50 cycles at 50 MHz, one period is 1 µs. A record is sent only for periods in which
at least one input fired, so an idle system sends nothing. The 32-bit counter wraps after
2^32 µs (about 71.6 minutes), and the host has to unwrap it.

**Host to device: commands.** Every host byte is one of three kinds:

- `0x53` is the start command. It sets the `started` register, and only a reset clears it. Before
  start, the timestamp counter is stopped, inputs are ignored and no DAC load is issued.
- `0001 mmmm` followed by two more bytes `ssssssss ssssssss` is a DAC request. It writes the
  16-bit sample `s` (high byte first) into every DAC channel whose bit is set in the mask `m`.
  These three bytes are exactly the 24-bit SPI frame that the MAX5134 expects for "write input
  registers". The command handler therefore passes them through the stimulus FIFO unchanged.
- Any other byte in command position is an error (flag 2). The byte is dropped.

The new samples appear on all four DAC outputs together at the next rising edge of input 0,
which acts as the frame clock. The host must refill all four channels (one request with mask
`1111` or several smaller ones) between two frame-clock pulses. It may send requests well ahead
of time, because they wait in the 16 KiB stimulus FIFO.

**Capacity.** A host link of about 1 Mbit/s carries roughly 125 kB/s, which is 25 000 records
per second. The acquisition FIFO holds 16 384 bytes, about 3 300 records, of backlog while the
host is not polling. The 6.2 kHz, 6.1 kHz and 500 Hz sources of a typical bench test, plus three
2 kHz sources, produce under 19 000 events per second.

## The external SRAM as two FIFOs

This is the part of the design that is hardest to follow. It involves three modules.

**`sram_ctrl`** accepts requests `{write, addr, data}` into a small request FIFO. Each
request takes exactly two clock cycles, and a one-bit `cycle` register tracks them:

- In the first cycle the address is driven. For a write, the data is also driven and `nWE` is
  low.
- In the second cycle `nWE` is high again. The address and data stay stable, and for a read the
  pad value is captured into a response FIFO.

So the memory sustains one access every two cycles. At 50 MHz that is 40 ns per access, well
inside a 20 ns SRAM. Writes produce no response. A read is dispatched only when the response
FIFO has room.

**`sram_split`** gives two clients their own request FIFOs. When only one FIFO holds a request,
that request goes to the controller. When both do, the client that was **not** served last
wins. A one-bit `turn` register remembers the last grant, which makes this a least-recently-used
arbiter. The client number becomes the top address bit, so client 0 (stimulus FIFO) owns
addresses 0–16383 and client 1 (acquisition FIFO) owns 16384–32767. For every read, the client
number is pushed into a `pending` FIFO, so that responses, which return in request order, go
back to the right client.

**`sram_fifo`** is a byte FIFO with a flip-flop head and an SRAM ring behind it:

- A one-byte **cache** register holds the head of the queue. `first`/`deq` work on it with no
  memory latency.
- When the whole FIFO is empty, an enqueued byte **bypasses** the SRAM and goes straight into
  the cache. This is the fast path when the consumer keeps up.
- Otherwise, enqueued bytes pass through a 2-entry write buffer and are **written** to the ring
  at `tail`. Bypass is allowed only when the ring, the write buffer and any outstanding read are
  all empty. Without that rule, bytes would be reordered.
- When the cache is empty and the ring is not, a **read** of `head` is issued. Its response
  refills the cache. Only one read is outstanding at a time.
- When a read and a write are both waiting, the read goes first if `head == tail`: the write
  would fill the very slot the read still has to fetch, so the read must come first. Otherwise
  the FIFO alternates, choosing the kind of access it did not issue last (`last_write`). With
  the occupancy limit below, `head == tail` with a read waiting means the ring is full, so
  that no write can be waiting then. The rule is kept as a guard.
- `not_full` is false once the ring plus the write buffer hold 2^`AW` bytes. With `AW = 14` the
  FIFO therefore holds 16384 bytes plus the byte in the cache.

When the acquisition side stops transmitting, bytes spill into the ring. When it resumes, the
ring drains one read at a time. A drained byte needs about 7–9 cycles from the moment the cache
empties until the next byte sits in it. The path is:

1. request FIFO of the split;
2. the controller's request FIFO;
3. two SRAM cycles;
4. the response FIFO;
5. the cache.

This latency, not the SRAM bandwidth, sets how fast a backlog drains.

## Acquisition path

- **`async_pulse_sync`** is a two-flop synchronizer plus a rising-edge detector. Each input pulse,
  of any width, becomes one single-cycle pulse.
- **`synchronizer`** ORs these pulses into `channelFlags`. A prescaler ends a period every
  `UPDATE_DIV` cycles (counting only while started). At the end of each period:
  - the timestamp counter increments;
  - if any flag is set, `{flags, timestamp}` goes to the serializer;
  - the flags clear. Pulses that arrive in that same cycle are included in the record being
    sent.
  If the serializer cannot take the record, the record is lost and error flag 0 is raised. The
  timestamp still advances, so later timestamps stay exact.
- **`funnel`** is the serializer. It has an input FIFO, a byte counter and a shift register, and
  emits the 5 bytes of a record most significant first, at one byte per cycle, into the
  acquisition `sram_fifo`.

## Stimulus path

- **`cmd_handler`** sorts host bytes into start, DAC request (the command byte plus the next two
  bytes are forwarded) and invalid. It takes a byte only when the stimulus FIFO has room.
- **`unfunnel`** collects three bytes into a 24-bit request, with the first byte ending up as
  the most significant.
- **`dac_sched`** does two jobs:
  - **Gating requests.** A 4-bit `filled` mask records which DAC channels received a new sample
    since the last load. Once all four are filled, no further request is passed on until the
    next load. This keeps frame *n+1*'s samples from overwriting frame *n*'s before they were
    shown.
  - **Issuing loads.** A rising edge on input 0 (while started) issues a load. If at that moment
    the DAC is busy or not all channels were refilled, error flag 1 (stimulus underrun) is
    raised.
  A request whose command nibble is not `0001` after leaving the SRAM shows memory corruption.
  It is dropped and raises error flag 3.
- **`dac_ctrl`** runs the MAX5134 over SPI:
  - After reset it waits `STAB_CYCLES`, sends a first calibration command, waits `CAL_CYCLES`
    and sends a second one.
  - A frame shifts out of a 25-bit register `{frame, 1}`. The trailing 1 marks the end, so the
    frame is done when only that bit is left.
  - Each bit takes two cycles (SCLK = 25 MHz). DIN changes with SCLK rising and is stable when
    SCLK falls.
  - After the last bit, chip select rises and the controller waits 2 more cycles. A request
    therefore takes 51 cycles, well under one 60-cycle frame at the fastest frame rate tried.
  - A load pulls `nLDAC` low for 2 cycles.

## Errors

| flag / LED | raised when |
|---|---|
| 0 | a record could not enter the serializer (acquisition FIFO full) |
| 1 | a frame-clock pulse arrived while the DAC was busy or not all channels had new samples |
| 2 | the host sent a byte that is not a valid command |
| 3 | a DAC request read back from the SRAM had an invalid command nibble |

The flags are sticky until reset. Each LED blinks with bit `BLINK_BITS-1` of a free-running
counter while its flag is set (about 3 Hz at 50 MHz).

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `acq_system` | `UPDATE_DIV` | 50 | clock cycles per timestamp period (1 µs at 50 MHz) |
| | `FIFO_ADDR_BITS` | 14 | address bits per SRAM FIFO (16 KiB each; the SRAM has one more bit) |
| | `DAC_STAB_CYCLES`, `DAC_CAL_CYCLES` | 500000 | DAC start-up and calibration waits (10 ms each) |
| | `BLINK_BITS` | 24 | LED blink counter width |
| `acq_pkg` | `NUM_INPUTS`, `TS_BITS`, `FLAG_BITS` | 6, 32, 8 | record layout |
| | `CMD_START`, `DAC_WRITE_CMD` | `8'h53`, `4'b0001` | host command encoding |

## Where this RTL departs from the original design

- The original work compares two ways of sharing the SRAM. One is the decoupled,
  latency-insensitive arbiter built here (`sram_ctrl` + `sram_split` + per-FIFO arbitration).
  The other is a static central arbiter with a fixed 8-cycle schedule that gives each FIFO
  operation its own slot. Only the first is provided. It was the main and more resilient
  version.
- Several things are choices of this design because the original gives no values or encodings:
  - the start byte value;
  - recognising a DAC request by its command nibble;
  - the synchronizer depth;
  - all FIFO depths;
  - the SPI bit timing and the use of the DAC's `nLDAC` pin for the load;
  - the calibration wait lengths and command words;
  - the LED blink rate;
  - sending records only for periods with activity.
  The calibration command words follow the MAX5134 data sheet as understood here and should be
  checked against it before use on hardware.
- The original FIFO reaches its throughput through the scheduling of BSV rules and EHR
  registers. Here every FIFO has registered full/empty flags. The behaviour is the same, but
  latencies differ by a cycle or two.
- **Resilience under overload differs.** The original work simulated the system with a
  20-cycle timestamp period, the host taking 1 byte per 6 cycles and sending 1 byte per
  10 cycles, a 1/60 frame clock and Poisson inputs. It reports the first failure after about
  10^3 cycles at 1/20 event per cycle, and no failures below about 0.028. Under the same
  conditions (`tb_mtbf_workload`) this RTL behaves as follows:
  - it fails only by filling the 16 KiB acquisition FIFO;
  - at 0.050 events/cycle that happens after 3.2×10^5 cycles, and at 0.045 after 4.6×10^5;
  - at 0.040 and below there is no failure within 6×10^5 cycles.
  Two effects explain the difference. Events in the same period share one record, and the
  serializer never overflows because the SRAM accepts a write every two cycles. Once the ring
  is in use, the backlog drains at about one byte per 8.7 cycles, limited by the read latency
  described above.
- Not part of the RTL: the JTAG-UART (vendor IP, seen here as two byte streams), the SRAM and
  DAC chips, and the input protection buffer. `tb/sram_model.sv` is a behavioural SRAM used by
  the testbenches.

## Synthesis

A generic synthesis of `acq_system` at its defaults gives about 530 cells, 372 flip-flop bits
and 288 bits of FIFO storage. No vendor fit was done. A CPLD without block RAM builds the FIFO
storage from logic elements too.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. Any of them can be run with plain Verilator, for example:

```sh
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/acq_pkg.sv tb/tb_acq_system.sv \
  --top-module tb_acq_system --Mdir obj -o sim
./obj/sim
```

| testbench | what it covers |
|---|---|
| `tb_async_pulse_sync` … `tb_error_led` | one block each, random traffic against a reference model, plus rate checks (serializer 1 byte/cycle, SRAM 2 cycles/access) |
| `tb_acq_system` | the whole system at default parameters (~1M cycles, a few seconds) |
| `tb_mtbf_workload` | time to failure against input rate, as described above |
| `tb_bench_validation` | default parameters, 40 ms of square waves at 500 Hz, 6.2 kHz, 6.1 kHz and about 2 kHz on the six inputs with a 1 Mbit/s host link; every recorded interval must be within 1 µs of the source period (about 8 s) |

`tb_acq_system` covers the following:
- DAC calibration.
- The start command, then random pulses on inputs 1–5 and a frame clock on input 0. Every
  record is checked against the pulses driven, every SPI frame against the requests sent, and
  every load against the frame clock.
- A long transmit stall that pushes records through the SRAM ring.
- The four error conditions, including a full 16 KiB overflow.

It counts each mechanism, such as bypass, SRAM spill on both FIFOs, LRU decisions and DAC
blocking, and fails if one never occurred.
