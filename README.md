# Fulmine: a secure near-sensor analytics cluster in SystemVerilog

Fulmine is a small system-on-chip for IoT end nodes. It is meant to analyse sensor data in
place, using convolutional networks or signal processing, and to encrypt what it sends or
stores, all within a few milliwatts. It is built as a cluster of four processors and two
accelerators. The accelerators are a convolution engine (HWCE) and a crypto engine (HWCRYPT).
All six share one 64 kB scratchpad, so handing data from the processors to an accelerator is
just passing a pointer. A separate SoC domain holds the 192 kB L2 memory and the power
manager. The two domains run on their own clocks, and the cluster can be clock-gated or
power-gated between bursts of work.

This RTL covers the cluster's memory system, interconnects, accelerators, DMA, event unit,
clock gating and power management, plus the L2 and the clock-domain crossing. The processor
cores are not included; their data ports are top-level ports. Neither are the instruction
cache, the FLLs, the I/O peripherals, the I/O DMA or the AXI/APB bus IP.

## Address map and events

| Region | Base | Contents |
|---|---|---|
| TCDM | `0x1000_0000` | 64 kB in 8 banks; word `i` lives in bank `i mod 8` |
| Timer | `0x1020_0000` | peripheral slot 0 |
| HWCE | `0x1020_1000` | slot 1 |
| HWCRYPT | `0x1020_2000` | slot 2 |
| DMA | `0x1020_3000` | slot 3 |
| Event unit | `0x1020_4000` | each core's private view |
| L2 (DMA side) | any; word = `addr[17:3]` | 192 kB, 64-bit words |

Events are bits of a 32-bit vector:

| Bit(s) | Source |
|---|---|
| 0 | DMA |
| 1 | HWCE |
| 2 | HWCRYPT |
| 3 | timer |
| 4-11 | I/O lines |
| 12 | barrier |
| 16-23 | software events |

Every register map is described in the header comment of its module. All constants are in
`rtl/fulmine_pkg.sv`.

## The cluster memory system

Every master uses one small request/grant protocol, `mem_req_t` / `mem_rsp_t`:
- A master raises `req` with the address and data.
- `gnt` answers it combinationally in the same cycle.
- `rvalid` and `rdata` follow one cycle after the grant.
- A master that is not granted must hold its request unchanged. An assertion in the
  interconnect checks this.

`log_interconnect` is a single-cycle crossbar with one round-robin arbiter per slave.
- The TCDM instance has 12 masters:
  - 4 core ports;
  - 4 DMA ports;
  - 4 ports shared by the two accelerators.
- It connects them to 8 word-interleaved banks.
- Two masters that hit the same bank in the same cycle are served one after the other. The
  loser simply sees `gnt` low.
- The peripheral interconnect is the same module with the select field moved to address
  bit 12, which gives each peripheral a 4 kB window.

Each core has a `core_demux` that steers its accesses by address to one of three targets:
- the TCDM;
- its private port on the event unit;
- the peripheral interconnect.

The two accelerators share four TCDM ports through `tcdm_static_mux`, one accelerator at a
time:
- HWCE uses all four ports and HWCRYPT uses ports 0 and 1.
- Ownership moves only when the current owner is idle and the other is busy.
- A job started on the non-owner therefore waits until the owner finishes.

## Event unit and power management

A core waits for an event by reading the WAIT register of the event unit.
- The load gets its grant but no answer until an event the core has unmasked arrives.
- Meanwhile the event unit drops that core's clock enable.
- The core's clock gate stops its clock until the cycle in which the answer is delivered.

A barrier uses the same mechanism. Every core in BARRIER_MASK reads BARRIER, and all of them
are answered together two clock edges after the last one joins.

`cluster_pmu` is the clock-gating manager. It runs on the free-running cluster clock.
- It watches for activity: a core awake, HWCE, HWCRYPT or the DMA busy.
- In idle mode with nothing active, it stops the whole cluster clock.
- A rising I/O event line restarts the clock in the same cycle, so the event unit can
  register the event and wake the waiting core.
- It also gates the HWCE and HWCRYPT clocks. Each runs only while its accelerator is busy,
  addressed, or finishing a response or event.

`soc_pmu` holds the power mode (active, idle, deep sleep).
- In deep sleep, once the cluster reports nothing busy, it puts the cluster into reset,
  drops the regulator enable and waits for power-good to fall.
- An I/O event reverses these steps: it re-enables the regulator, waits for power-good,
  releases the reset and returns to active mode.
- The cluster then restarts from reset. Only the memory arrays keep their contents, and only
  because they are not modelled as losing state.

## DMA and the L2

`cluster_dma` queues up to 16 transfers.
- A core writes the transfer's fields, then writes the direction to CMD to enqueue it.
- A transfer is 1D or 2D. The L2 side of a 2D transfer uses a stride; the TCDM side is
  contiguous.
- Data move in 64-bit beats. Even beats use TCDM ports 0/1 and odd beats use ports 2/3, so
  two beats proceed at once.
- Towards L2, requests and responses cross into the SoC clock domain through two `dc_fifo`
  dual-clock FIFOs (Gray-coded pointers, two-flop synchronisers).
- The L2 answers every request: with data for a read, with an acknowledgement for a write.
- A transfer's event is raised only after its last write has been acknowledged.

`l2_sram` is a 64-bit array with this cluster-side port and a 32-bit SoC-side port, which
stands in for the I/O DMA.

## HWCRYPT

HWCRYPT computes AES-128 with two `aes_core` instances, each doing two rounds per cycle.
- Both share one on-the-fly key generator, `aes_keygen`.
- The key generator runs forward for encryption and backward for decryption, starting from
  a stored last round key.
- The modes are:
  - ECB;
  - XTS, where the initial tweak is the sector number encrypted under key 2 and `xts_tweak`
    multiplies it by α in GF(2^128);
  - a single round, as an instruction-like primitive.

`sponge_engine` holds two Keccak-f[400] instances (`keccak_f400`, three rounds per cycle,
1 to 20 rounds). Its modes are:
- an authenticated-encryption sponge, where one permutation makes the key stream and the
  other the MAC over the ciphertext;
- encryption only;
- a raw permutation.
The rate is 2^k bits, up to 128.

Operations are queued: up to four wait behind the running one, and a fifth trigger stalls
the writing core. Data move over two TCDM ports: 32 bytes per step for AES and 16 for the
sponge.

The cipher is correct, but the engine reaches only about half the expected throughput.
Measured figures, with the expected values for comparison:
- AES-ECB takes 0.69 cycles/byte. A design that overlaps memory transfers with computation
  would reach about 0.38.
- XTS runs at the same rate as ECB, because the tweak update runs in parallel.
- The cause is that read, compute and write are not overlapped here.

## HWCE

HWCE computes `y_out = sat16((x * W + (y_in << QF)) >> QF)` over the valid region of an
image.
- Filters are 5×5 or 3×3.
- Weights come in three precisions, which set how many filters run in one pass:

  | Weight precision | Filters per pass |
  |---|---|
  | 16 bit | one |
  | 8 bit | two |
  | 4 bit | four |

- The filters of the 8-bit and 4-bit modes are interleaved inside each 16-bit weight word.
- Reading `y_in` and writing `y_out` through the same pointer lets software accumulate over
  input channels.

The datapath follows the classic figure of this engine:
- `hwce_line_buffer` turns the raster stream into a sliding window. It has four line FIFOs
  indexed by the column, and a 5×5 shift register.
- `hwce_sop` multiplies the 25 pixels by the four 4-bit slices of every weight. This gives
  20-bit products, which are reduced to 27-bit partial sums.
- A pipeline register follows.
- Each slice's partial sums are reduced to a 30-bit sum `hb[s]`.
- A second tree combines them:
  - `fb[1] = (hb[3] << 4) + hb[2]`
  - `fb[0] = (hb[1] << 4) + hb[0]`
  - `hw = (fb[1] << 8) + fb[0]`
- A multiplexer then picks the output for the precision mode:

  | Precision | Output(s) |
  |---|---|
  | 16 bit | `hw` |
  | 8 bit | `fb[0..1]` |
  | 4 bit | `hb[0..3]` |

- A slice is multiplied as signed only when it holds the top bits of a weight in the current
  mode.

Around the datapath, streams are decoupled by small FIFOs with credit-based issue:
- the x stream;
- up to four `y_in` streams;
- up to four `y_out` streams.

Each cycle, the four TCDM ports go to up to four of the streams that request, with rotating
priority. A port whose request was refused keeps the same stream, as the interconnect
requires. Other details:
- Pixels and weights are 16-bit values in the low half of 32-bit words.
- Lines may be at most `LINE_MAX` = 64 pixels wide, so wider images are processed in
  vertical stripes.
- A queue holds two jobs besides the running one.

Measured on a 64×32 image without contention, in cycles per pixel per filter. The expected
figures come from a full-platform benchmark with contention from the cores.

| Weights | 5×5 here | 3×3 here | 5×5 expected | 3×3 expected |
|---|---|---|---|---|
| 16 bit | 1.02 | 1.01 | 1.14 | 1.07 |
| 8 bit | 0.65 | 0.68 | 0.61 | 0.58 |
| 4 bit | 0.51 | 0.53 | 0.45 | 0.43 |

The 4-bit mode is limited by the ports: each pixel needs one x read, four `y_in` reads and
four `y_out` writes over four ports.

## Where this RTL departs from the reference architecture

- The DMA sits on the peripheral interconnect rather than on the per-core demultiplexers.
- The DMA has one command queue instead of per-core command FIFOs merged by an arbiter.
- The DMA's L2 link is a plain request/response channel, not AXI with 256-byte bursts.
- Transfers are tracked by a done counter, not by transfer IDs.
- HWCRYPT does not overlap memory traffic with computation (see above).
- The accelerator buffers are flops, not latch-based standard-cell memories.
- The clock gating is one gate per accelerator rather than per sub-block.
- FLL control and the low-frequency retentive mode are not modelled.
- Register maps, the address map, event numbers, the sponge IVs and the deep-sleep handshake
  are this design's own choices.

## Files and simulation

`rtl/` holds one module or package per file:
- `fulmine_pkg`, `aes_pkg` and `keccak_pkg` hold the shared types and functions.
- `fulmine_top` is the top level.

`tb/` holds the self-checking testbenches:
- `tb_fulmine_top`: the whole design at its default sizes. It runs DMA in both directions,
  convolutions at all three precisions, an AES known-answer test, the static-mux hand-over,
  a full command queue, wait-for-event, barrier, timer, idle mode and deep sleep. It counts
  each of these and fails if one never happens.
- `tb_hwcrypt`: FIPS-197 and IEEE 1619 vectors, sponge modes against a reference model, the
  queue and throughput.
- `tb_hwce`: all precisions and sizes against a reference convolution, saturation, the job
  queue and throughput.
- `tb_mem` and `tb_keccak_ref`: a behavioural memory and a Keccak reference model, used by
  the other testbenches.

Each testbench prints `TB_RESULT checks=N failures=M`. With Verilator 5, packages first:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/fulmine_pkg.sv rtl/aes_pkg.sv rtl/keccak_pkg.sv tb/tb_keccak_ref.sv \
      $(ls rtl/*.sv | grep -v _pkg) tb/tb_mem.sv tb/tb_fulmine_top.sv \
      --top-module tb_fulmine_top -o sim && ./obj_dir/sim

Replace `tb_fulmine_top` with `tb_hwce` or `tb_hwcrypt` to run the accelerator benches.
`-Wno-fatal` keeps the testbenches' width warnings from stopping the build. Lint warnings
that remain in the RTL:
- `SYNCASYNCNET` on the cluster reset. The interconnect's handshake assertion samples the
  reset on the clock in `disable iff`.
- `UNUSEDSIGNAL` on fields of shared structs and on address bits that a block decodes only
  in part. Each is noted in its module's header.
