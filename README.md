# DDR4 benchmarking platform for FPGAs

How fast can FPGA logic actually move data through a DDR4 channel? The
answer depends heavily on the access pattern. Sequential long bursts come
close to the interface's peak bandwidth. Random single-beat accesses pay for
a row activate and precharge almost every time, and can be five to seven
times slower. This RTL is a small, synthesizable traffic source and meter
that sits in front of each DDR4 channel's memory controller. It stimulates
the memory with patterns chosen at run time and measures the result in clock
cycles.

The platform has three kinds of parts:

* **Memory interfaces**, one per channel. Each is a DDR4 controller plus
  PHY, taken from the FPGA vendor. It presents an AXI4 slave port, and its
  PHY runs at four times the AXI clock. It is *not* part of this RTL. The top
  module brings out one AXI4 master port per channel for it.
* **Traffic generators** (TG), one per channel. Each is an AXI4 master that
  runs a *batch* of read, write or mixed transactions. It generates addresses
  and data, checks the data it reads, and counts cycles.
* **One host controller.** A UART command interpreter through which a host
  PC configures each TG, starts batches and reads back the counters.

```
             AXI clock domain (DATA_RATE_MTS / 8 MHz)
            +-------------------------------------------------------------+
  DDR4 <--> | [memory interface 0] <==AXI4==> traffic_generator 0 <--+     |
  DDR4 <--> | [memory interface 1] <==AXI4==> traffic_generator 1 <--+-- host_controller <--UART--> host PC
  DDR4 <--> | [memory interface 2] <==AXI4==> traffic_generator 2 <--+     |  (host_ctrl_logic + uart)
            +-------------------------------------------------------------+
   [ ] = vendor IP, outside this RTL; ddr4_bench_top holds everything else
```

Throughput is not computed in hardware. A batch of `n` bursts of `L` beats,
whose read or write cycle counter reads `C`, moved `n * L * 64` bytes in
`C` cycles of the AXI clock. So throughput = `n * L * 64 * f_axi / C`. At
DDR4-1600 (200 MHz AXI clock) one 64-byte beat per cycle is 12.8 GB/s.

## The traffic generator

`traffic_generator` is where nearly all the behaviour lives. Its read side
(AR and R channels) and write side (AW, W and B channels) are independent
state machines. They share only the configuration and the blocking rule.

### A batch

On `start` the TG latches its configuration (`tg_cfg_t`). It then issues
`batch` bursts per active direction. Each burst is `len + 1` beats (1 to 256;
up to 128 is the range of interest) of type FIXED, INCR or WRAP. The TG
finishes when every burst it issued has had its response: the last R beat
for reads, the B response for writes. `done` then stays high until the next
start. The operation mix is one of:

| `op` | meaning |
|------|---------|
| 0 read  | `batch` read bursts |
| 1 write | `batch` write bursts |
| 2 mixed | `batch` read bursts **and** `batch` write bursts, issued concurrently |

In a mixed batch, reads and writes run in parallel on their own channels. Each
side is timed by its own counter, so the host can split the combined
throughput into a read part and a write part.

### Addresses

Two `tg_addr_gen` instances, one per direction, are restarted together at
batch start. Given the same configuration they produce the same address
sequence. This is what lets a read batch check the data a previous write
batch left behind.

* **Sequential**: the offset starts at 0 and moves on by the bytes one burst
  covers. That is `(len+1) * 64` for INCR and WRAP, and 64 for FIXED. It wraps
  at the region size.
* **Random**: the offset is a 32-bit Galois LFSR (x^32 + x^22 + x^2 + x + 1)
  started from `seed`. It is masked to the region and aligned to a 64-byte
  beat. The LFSR steps once per burst.

The region is `base + (offset & span_mask)`, so `span_mask + 1` should be a
power of two. The TG does not stop INCR bursts from crossing a 4 KiB
boundary. It also does not reject FIXED bursts longer than 16 beats or WRAP
lengths that are not 2, 4, 8 or 16. AXI4 forbids all of these. Whether the
memory interface accepts them is up to that interface; pick the
configuration accordingly.

### Data and checking

Write data is a pure function of the beat's byte address `A`. So read data
can be checked without any storage. 32-bit word `i` of a beat is:

* pattern 0: `(A + 4i) | 1`
* pattern 1: `((A + 4i) ^ rotl(seed, i)) | 1`

Bit 0 is forced to 1, so no word is ever zero. A write of all zeros would not
show that data actually reached the memory. With `check_en` set, every read
beat is compared with the pattern for its address. The beat address comes
from the burst's start, type and beat index. Each mismatching beat adds one
to `err_count`. So does every non-OKAY R or B response.

Leave `check_en` off in mixed batches and when reading a region no write
batch has filled. In those cases the data read is not the pattern, and the
errors counted mean nothing.

### Signaling modes

These modes control how hard the TG pushes the AXI4 port:

| `sig` | addresses | RREADY / BREADY | write data |
|-------|-----------|-----------------|-----------|
| 0 non-blocking | next burst presented in the cycle after the previous one is accepted, up to `MAX_OUT` (8) outstanding per direction | rise the cycle after the slave's VALID is seen, drop after each transfer (at most one beat per 2 cycles) | sent after its burst's address was accepted |
| 1 blocking | a new read *or* write address only when no read and no write burst is outstanding | as non-blocking | as non-blocking |
| 2 aggressive | as non-blocking | held high for the whole batch (one beat per cycle) | sent as soon as its address is presented |

The difference between non-blocking and aggressive is therefore visible
mainly as read and write-response throughput. The difference between
non-blocking and blocking shows up as latency-bound throughput.

### Counters (`tg_perf_counters`)

All counters are 32 bits wide, saturate instead of wrapping, and are cleared
at batch start.

| counter | counts |
|---------|--------|
| `rd_cycles`, `wr_cycles` | cycles from the batch start until the last read / write response |
| `rd_txn`, `wr_txn` | read bursts completed (last R beat), write bursts completed (B) |
| `rd_lat_sum` | sum over read bursts of the cycles from AR handshake to first R beat; divide by `rd_txn` for the mean read latency |
| `err_count` | data mismatches and error responses |

With `EXTENDED = 0`, only the two cycle counters and the error counter are
built.

### Timing of the handshakes

All IDs are 0, so the memory interface returns responses in order. The TG
keeps a small queue of outstanding bursts per direction (`MAX_OUT` entries)
holding each burst's address, length, type and issue time. From it the TG
knows which address each returning R beat belongs to. The W channel reads
its beats from the same kind of queue. `tb_traffic_generator` checks these
rates with a 6-cycle memory model: four 128-beat aggressive reads take
512 cycles plus the latency, and in non-blocking mode 1024 plus the latency.

## Talking to the platform

The UART is 8N1 at `BAUD` (115200). The control logic accepts two frames
(bytes; multi-byte values little-endian):

```
write:  0x57 'W', channel, register, d0, d1, d2, d3     reply: 0x4B 'K'
read:   0x52 'R', channel, register                     reply: d0, d1, d2, d3
```

Channel `0xFF` writes every channel. Writing 1 to CTRL on channel `0xFF`
starts all traffic generators in the same clock cycle, which is how
multi-channel throughput is measured. Reads of a channel that does not exist
return 0. A first byte that is not `W` or `R` is skipped. The host must wait
for each reply before sending the next frame.

| reg | name | write | read |
|-----|------|-------|------|
| 0x00 | CTRL | bit 0: start a batch | bit 0 busy, bit 1 done |
| 0x01 | MODE | `[1:0]` op, `[2]` random, `[4:3]` AXI burst type (0 FIXED, 1 INCR, 2 WRAP), `[6:5]` signaling, `[7]` check_en, `[8]` data pattern, `[23:16]` AXI len (beats-1) | same |
| 0x02 | BATCH | bursts per direction per batch | same |
| 0x03 | SEED | LFSR / data seed | same |
| 0x04 | BASE | region base address | same |
| 0x05 | SPAN | region size - 1 | same |
| 0x10..0x15 | counters | - | rd_cycles, wr_cycles, rd_txn, wr_txn, rd_lat_sum, err_count |

After reset every channel is set to read, sequential, INCR, non-blocking,
1-beat bursts, batch 1, seed 1, base 0, and the whole address space.

A typical measurement of sequential 32-beat reads on all channels:

```
W FF 02  00 01 00 00      batch = 256
W FF 01  09 00 1F 00      write, sequential, INCR, non-blocking, len 31
W FF 00  01 00 00 00      start; poll R ch 00 until it reads 2
W FF 01  88 00 1F 00      read (op 0) with check_en, same pattern
W FF 00  01 00 00 00      start; poll; then R ch 10 (rd_cycles) and R ch 15 (errors)
```

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `N_CH` | 3 | top | memory channels, each with its own TG and AXI4 port |
| `DATA_RATE_MTS` | 1600 | top | DDR4 data rate; `clk` is taken to be DATA_RATE_MTS/8 MHz, which sets the UART bit time (1736 cycles at 1600, 2604 at 2400) |
| `BAUD` | 115200 | top | UART rate |
| `MAX_OUT` | 8 | top, TG | outstanding bursts per direction (power of two) |
| `EXTENDED` | 1 | top, TG | build the transaction and latency counters |
| `AXI_DATA_W` | 512 | `tg_pkg` | AXI data width: 64-bit DDR4 x 8 transfers per AXI cycle at the 4:1 clock ratio |
| `AXI_ADDR_W` | 32 | `tg_pkg` | AXI address width |
| `AXI_ID_W` | 4 | `tg_pkg` | AXI ID width (IDs are always 0) |

The data rate matters to the memory interface (its PHY clock is
`DATA_RATE_MTS/2` MHz, four times the AXI clock). This RTL uses it only to
size the UART divider. The evaluated rates are 1600, 1866, 2133 and 2400 MT/s.

## Connecting a memory interface

`ddr4_bench_top` has `clk`, `rst_n`, the two UART pins and two arrays of
structs. `m_axi_req[c]` (`tg_pkg::axi_req_t`) holds the master-driven AXI4
signals of channel `c`: AW channel, W channel, BREADY, AR channel and
RREADY. `m_axi_resp[c]` (`axi_resp_t`) holds the slave-driven ones. Field
names follow AXI4 (`aw.addr`, `aw.len`, `aw.size`, `aw.burst`, `w.data`,
`w.strb`, `w.last`, `r.data`, `r.last`, `r.resp`, ...). The optional AXI4
signals (lock, cache, prot, qos) are not generated; tie them to their
defaults at the memory interface. `clk` must be the memory interface's AXI
user clock, and `rst_n` should be released once its calibration is done.

## Where this departs from, or goes beyond, the description it follows

The platform's structure and run-time options follow a published
description. These are:

* the per-channel TG and memory interface, and the single host controller
  with control logic and UART;
* the five independently handled AXI4 channels;
* bursts of 1 to 128 beats, FIXED / INCR / WRAP;
* sequential and random addressing;
* the three signaling modes;
* non-zero data with read-back checking;
* cycle counters per direction;
* separate read and write statistics in mixed workloads;
* latency as a statistic.

That description does not give the internals. Everything below is this
design's own choice and should be read as such:

* Bus widths, counter width, `MAX_OUT`, the single AXI ID.
* The exact handshake behaviour of each signaling mode (table above). In
  particular, "non-blocking" uses ready-after-valid on R and B, which caps
  those channels at one transfer per two cycles.
* Mixed batches: `batch` reads plus `batch` writes, concurrently.
* Address sequences (step, LFSR, region) and the two data patterns.
* The whole host protocol: frames, register map, broadcast channel.
* Asynchronous active-low reset throughout.

Not built:

* **Refresh-related degradation**, which the description lists as a
  collectable statistic without saying how. It would need signals from inside
  the vendor memory controller.
* **The memory interface, PHY and DRAM.**

No DRAM timing model exists in this RTL or its testbenches, so the
throughput figures measured on hardware cannot be reproduced in simulation.
The testbench memory answers with a fixed latency.

The published implementation of one traffic generator is far smaller than
this one: about a hundred LUTs and under three hundred flip-flops. This
version has about 800 flip-flops, mostly the outstanding-burst queues and
the 32-bit counters, and a 512-bit comparator. So the original is organised
differently inside, and this RTL should not be used to predict its resource
use.

Known limitations:

* Bytes arriving while the host controller is still answering are dropped.
* A batch cannot be aborted except by reset.
* `start` is ignored while a batch runs.

## Files

| file | content |
|------|---------|
| `rtl/tg_pkg.sv` | AXI4 structs, configuration and statistics structs, enums, `beat_addr()` |
| `rtl/tg_addr_gen.sv` | sequential / LFSR burst addresses |
| `rtl/tg_data_gen.sv` | address-derived data pattern and read check |
| `rtl/tg_perf_counters.sv` | batch counters |
| `rtl/traffic_generator.sv` | AXI4 master: batch control, five channels, signaling modes |
| `rtl/uart.sv` | 8N1 receiver and transmitter |
| `rtl/host_ctrl_logic.sv` | command decoder, per-channel configuration registers |
| `rtl/host_controller.sv` | UART + control logic |
| `rtl/ddr4_bench_top.sv` | `N_CH` TGs + host controller |
| `tb/axi_mem_model.sv` | behavioural AXI4 slave memory: fixed latency, optional random stalls, optional row-change penalty (16 banks, 8 KiB rows) |
| `tb/host_uart_tasks.svh` | host-side UART tasks: `host_write`, `host_read` |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_ddr4_bench_top` end to end; `tb_ddr4_bench_full` at default parameters; `tb_workload_sweep` the evaluated pattern sweep |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself,
with a watchdog for hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tg_pkg.sv tb/tb_ddr4_bench_top.sv --top-module tb_ddr4_bench_top
./obj_dir/Vtb_ddr4_bench_top
```

Replace the testbench name for any other test. `-y rtl -y tb` lets Verilator
find each module by its file name. Verilator is two-state, so the design
resets every register that is read.

* `tb_ddr4_bench_top` runs the three channels through UART at 8 cycles per
  bit, against three memory models (one with random stalls). It uses every
  op mix, addressing mode, burst type and signaling mode, single-channel and
  broadcast start, and a deliberately corrupted word. It counts each of these
  and fails if any never occurred.
* `tb_ddr4_bench_full` leaves every parameter at its default
  (115200 baud at 200 MHz). It does one write batch and one checked read
  batch of 16 x 128-beat bursts on all three channels, in a few seconds of
  simulation.
* `tb_workload_sweep` walks one TG through the evaluated grid: read, write
  and mixed; sequential and random; burst lengths 1 to 128. It prints bytes
  per cycle for each point. The memory model here charges 6 cycles for every
  change of open row. That is enough to reproduce the shape of the hardware
  measurements:
  * random single-beat writes are about 4x slower than sequential ones;
  * random reads are slower by less, because sequential single-beat reads
    are already limited by 8 outstanding bursts against a 20-cycle latency;
  * the gap closes as bursts grow;
  * mixed batches exceed either direction alone.

  It is not a DDR4 timing model, and the absolute numbers mean nothing.
