# Multiphase FPGA TDC for a four-channel APD timing detector

In a nuclear resonance scattering (NRS) experiment, each X-ray bunch from the
storage ring produces a burst of prompt electronic scattering. The nuclear
scattering follows later, spread over tens to hundreds of nanoseconds. For
the 14.4 keV level of 57Fe the lifetime is 141 ns. Four avalanche-photodiode
(APD) detectors with fast preamplifiers turn single photons into pulses about
25 ns wide. The readout has to measure, to the nearest nanosecond, how long
after the bunch each photon arrived. It must do this for every photon between
two bunches, not just the first one, as older NIM-crate electronics did.

This repository holds the digital part of that readout, the logic inside the
FPGA:

* a time-to-digital converter (TDC) with 1 ns bins, built only from ordinary
  flip-flops clocked by four phases of a 250 MHz clock;
* one TDC channel per detector, plus one start channel shared by all four;
* per-channel FIFOs and a UDP/IPv4/Ethernet framer that sends the arrival
  times to the acquisition computer.

The analog chain is not here. That is the APD, the three-stage x10
preamplifier, the inverting amplifier and the discriminator with its
threshold DAC. Neither are the FPGA PLL, the Ethernet MAC or the optical
transceiver. Their signals are ports of the top module.

## Start, stop and what is measured

The RF timing signal of the storage ring marks each bunch and is the
*start*. A rising edge of a discriminator output is a *stop*. For every stop
the TDC reports the *arrival time*: the time from the most recent start to
that stop. A start resets the reference. Every stop that follows produces its
own hit, whether it is prompt or delayed, until the next start.

## How 1 ns bins come from 250 MHz clocks

The PLL delivers a 125 MHz *count clock* (8 ns period) and a 250 MHz
*quadrature clock* in four phases: 0, 90, 180 and 270 degrees. Those phases
have rising edges 0, 1, 2 and 3 ns apart. A rising edge of the count clock
always coincides with a rising edge of the 0-degree phase. Taken together, the
four phases rise once every nanosecond.

`mp_edge_detector` samples the input with four rows of two flip-flops. Row p
is clocked by phase p. The first flip-flop of the row samples the input, and
the second takes over the first's value one 4 ns cycle later. At a count-clock
edge the eight flip-flops therefore hold the input at the eight 1 ns instants
of the 8 ns period that has just ended:

| flip-flop            | phase 0 | phase 90 | phase 180 | phase 270 |
|----------------------|---------|----------|-----------|-----------|
| second (older)       | 0 ns    | 1 ns     | 2 ns      | 3 ns      |
| first (newer)        | 4 ns    | 5 ns     | 6 ns      | 7 ns      |

The sample-and-decode stage runs on the count clock. It looks for the first
0-to-1 step in this 8-bit picture. Instant 0 is compared with instant 7 of
the previous period. The index of that step is `HIT_TIME[2:0]`. An edge
between instants i-1 and i gives i. Each period yields at most one result,
registered on the count-clock edge that closes the period and valid during
the next one. A second rising edge in
the same 8 ns period is ignored. Pulses from the detector are about 25 ns
wide, so this does not happen in normal use.

The timing margin is small. The sample taken at 7 ns by the 270-degree row is
read by the count clock at 8 ns, leaving 1 ns. That is how the four-phase
scheme works. The placement and timing constraints of a real FPGA build are
not part of this code.

The same module is used twice. It serves as the start-edge detector (one
instance, shared) and as the stop-edge detector (one per channel).

## Arrival time = start hit-time + coarse time + stop hit-time

Number the count periods from the one that holds the start (period 0). Let
the start be seen at instant s of period 0. Let the stop be seen at instant t
of period k. Then:

* *start hit-time* = 8 - s, the time from the start to the end of period 0;
* *coarse time* = k - 1 periods of 8 ns, counted by `coarse_counter`. A start
  clears the counter, and it starts counting at the first count-clock edge
  after the start;
* *stop hit-time* = t, the time from the start of period k to the stop.

So `arrival = (8 - s) + 8 (k - 1) + t`, which is `8k + t - s` ns.

Worked example. The start is first seen at instant 1 (start hit-time 7 ns).
The stop is first seen at instant 2 of period 2 (stop hit-time 2 ns, coarse
time 1). The arrival is 7 + 8 + 2 = 17 ns.

The sum only works for k >= 1. `time_calc_unit` also covers two cases it
leaves open. A stop in the start's own period, at or after the start
(t >= s), gives `t - s`. A stop in that period but before the new start
belongs to the previous start, and uses that start's index and the coarse
count reached so far.

The coarse counter is 16 bits wide (a 524 us range) and saturates at its
maximum. A hit whose coarse time went past the maximum carries an overflow
flag, and its arrival field then holds the largest value the counter can
express.

Each start also increments a start number (modulo 512). Each hit carries the
number of the start it belongs to, so the receiver can group all hits of one
bunch.

### Pipeline and latency

| clock (8 ns) | what happens                                                            |
|--------------|-------------------------------------------------------------------------|
| period P     | edge sampled by the phase flip-flops                                    |
| end of P     | decode: `hit`, `HIT_TIME` registered (start and stop in step)           |
| end of P+1   | `time_calc_unit` combines decoded start, stop and coarse count and registers the hit word |
| end of P+2   | word written into the channel FIFO                                      |

Start and stop detectors have the same latency. The coarse counter therefore
works on decoded starts, one period late, and still gives the k-1 described
above.

## Hit word

Each hit is one 32-bit word (`tdc_pkg::hit_word_t`). In the UDP payload it is
sent most significant byte first.

| bits   | field      | meaning                                        |
|--------|------------|------------------------------------------------|
| 31:30  | `ch`       | detector channel 0..3                          |
| 29     | `ovf`      | coarse counter saturated: arrival is a lower bound |
| 28:20  | `start_no` | number of the start (mod 512) the hit follows  |
| 19:0   | `arrival`  | time after the start, 1 ns per count           |

## From channels to the network

Each channel writes its hits into its own `hit_fifo`: 1024 words,
first-word fall-through, on the 125 MHz clock. When a FIFO is full, the
newest hit is dropped and counted in `drops[c]`.

`rr_merge` picks the next non-empty FIFO in round-robin order, so that a busy
detector cannot starve the others.

`udp_tx` starts a datagram under either of two conditions:

* 64 words are waiting;
* fewer words are waiting, and the framer has sat idle with words waiting
  for 1024 clocks (8.2 us), so the last hits of a quiet stretch are not held
  back.

The frame has a 42-byte header followed by the words:

* Ethernet II header: destination and source MAC, type 0x0800;
* IPv4 header: 20 bytes, don't-fragment, TTL 64, protocol 17, and a header
  checksum computed in logic;
* UDP header: source and destination port 5000, checksum 0.

The MAC addresses, IP addresses and ports are parameters. Bytes leave one per
125 MHz clock (Gigabit Ethernet rate) on `tx_data`/`tx_valid`/`tx_last`,
under `tx_ready` back-pressure, without gaps inside a frame. The MAC is
expected to add the preamble, padding and FCS.

Counting preamble, gap and FCS, a Gigabit link carries about 25 M hits/s.
That is far above the required 1 MHz per detector. One detector at 8 MHz (the top of the measured linear range)
together with three at 1 MHz also fits. All four at 8 MHz would not fit for
long: about 149 MB/s is needed against 125 MB/s, and the FIFOs would
eventually drop hits.

## Top module `apd_tdc_top`

| port         | dir | width   | meaning                                          |
|--------------|-----|---------|--------------------------------------------------|
| `clk_q`      | in  | 4       | 250 MHz phases 0/90/180/270 degrees from the PLL |
| `clk`        | in  | 1       | 125 MHz count and working clock, rising with `clk_q[0]` |
| `rst_n`      | in  | 1       | active-low reset, synchronous to `clk`           |
| `start_sig`  | in  | 1       | RF timing signal (asynchronous)                  |
| `stop_sig`   | in  | NCH     | discriminator outputs (asynchronous)             |
| `tx_*`       | out/in | 8+1+1/1 | byte stream to the Ethernet MAC              |
| `frames`     | out | 32      | frames sent                                      |
| `fifo_full`  | out | NCH     | FIFO full flags                                  |
| `drops`      | out | 16 x NCH| hits lost per channel                            |

| parameter      | default | note                                  |
|----------------|---------|---------------------------------------|
| `NCH`          | 4       | detector channels (at most 4 with the 2-bit channel field) |
| `FIFO_DEPTH`   | 1024    | words per channel FIFO (power of two) |
| `MAX_WORDS`    | 64      | hit words per datagram                |
| `FLUSH_CYCLES` | 1024    | wait before a partial datagram is sent|

The TDC constants live in `tdc_pkg`: four phases, eight 1 ns bins per period,
a 16-bit coarse counter, a 20-bit arrival field and a 9-bit start number.

Synthesis of the top for a generic target gives about 600 word-level cells,
about 600 flip-flops and about 127 kbit of FIFO memory.

## What follows the original design and what is chosen here

These parts follow the published system:

* four channels, and one start detector and one PLL shared by them;
* 250 MHz four-phase sampling with two flip-flops per phase and a 3-bit
  decode, giving 1 ns bins;
* the 125 MHz coarse counter, reset by the start and resuming at the next
  count-clock edge;
* the arrival-time sum, with its start hit-time measured to the end of the
  start's period;
* recording of all events between starts;
* FIFO and UDP output on the 125 MHz clock.

These are choices made here, because the original is silent on them:

* the coarse counter width and its saturation;
* the handling of stops in the start's own period;
* the hit word layout and start numbering;
* one FIFO per channel, its depth and drop policy;
* the round-robin merge;
* every detail of the UDP framing;
* the reset behaviour.

In the original channel diagram the stop signal is also drawn into the
coarse counter. Here the counter value is captured in the time-calculate unit
when the stop is decoded, which has the same effect. The original describes
no digital interface for the threshold DAC, so none is provided.

## Simulation

All files are SystemVerilog 2017. Clocks in simulation come from
`tb/pll_model.sv`. It changes the four phases and the count clock together
in 1 ns steps, so that coinciding edges fall in the same time step. Use
`timescale 1ns/1ps`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/tdc_pkg.sv tb/tb_apd_tdc_top.sv --top-module tb_apd_tdc_top -o sim
./obj_dir/sim
```

Each testbench ends with `TB_RESULT checks=N failures=M`.

| testbench              | what it shows                                                      |
|------------------------|--------------------------------------------------------------------|
| `tb_mp_edge_detector`  | HIT_TIME for random edges placed between sampling instants, one-period latency, no false hits |
| `tb_coarse_counter`    | k-1 counting after a start, saturation and overflow flag          |
| `tb_time_calc_unit`    | arrival = 8(P_stop - P_start) + t - s for all cases, start numbering |
| `tb_tdc_channel`       | one channel with the shared start detector against the instant-difference model |
| `tb_hit_fifo`          | FIFO against a queue model, full and drop counting                |
| `tb_rr_merge`          | round-robin choice, one-hot pop and strict rotation when all FIFOs are busy |
| `tb_udp_tx`            | frame parsing: addresses, lengths, IPv4 checksum, payload order, flush and full datagrams, stall handling, gap-free frames |
| `tb_apd_tdc_top`       | whole readout at default sizes, in three phases. Every hit is checked against an independent model. The run covers: several hits per start, stops in a start's own period, stops just before a start, coarse overflow over a 540 us start gap, FIFO overflow while the MAC is stalled, full and flushed datagrams. |
| `tb_workload_nrs`      | 57Fe-like time spectrum: prompt and exponentially delayed (141 ns) events on four detectors, with the decay recovered from the received arrival times |
| `tb_workload_rate`     | 8 MHz Poisson input on one detector and 1 MHz on three: every hit delivered, no drops |

All testbenches run in seconds.

The simulation checks logic, not analog timing. An edge placed exactly on a
sampling instant, metastability, and the 1 ns path from the last phase row to
the count clock are outside what an RTL simulation can show.
