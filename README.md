# METICULOUS memory emulator: RTL of the FPGA side

Operating systems and runtimes for hybrid main memory (DRAM next to a slower
non-volatile or disaggregated memory) need real hardware to be studied.
Software slowdown models and instruction-level simulators are either
inaccurate or far too slow. The METICULOUS emulator takes a different route. An
FPGA SoC's CPU cores reach a DRAM module attached to the FPGA fabric. Logic in
the fabric sits on the AXI4 path between the CPU and the DDR4 memory
controller. That logic makes each address region of this DRAM behave like a
different memory device, with its own:

* read latency and write latency,
* read bandwidth and write bandwidth,
* read bit-error rate and write bit-error rate.

The CPU keeps using ordinary loads, stores and caches. Software can move the
regions and change every parameter at run time, also while traffic is flowing.

This repository gives SystemVerilog for that fabric logic. The design follows
the METICULOUS paper (Sec. 4–5 and its Fig. 3 block diagram). Where the paper
says what a block does but not how, the simplest structure that does it was
chosen, and each such choice is listed in the last section below.

```
             CPU AXI4 (s_*)                                   DDR4 controller AXI4 (m_*)
                  |                                                     ^
           +--------------+     +-------------------+     +---------+   |
           | region_demux |---->| rate_controller 0 |---->|         |---+
           |  by address, |     +-------------------+     | mem_mux |
           |  same-ID     |---->| rate_controller 1 |---->|         |
           |  ordering    |     +-------------------+     +---------+
           +--------------+              ^  ^
                  ^ boundary[]       cfg |  | tick, now
   CPU AXI4-Lite  |                      |  |
   (csr_*) --> mc_csr -------------------+  mc_timer
```

## The rate controller

A rate controller serves one memory region. It is an AXI4 slave towards the
CPU and an AXI4 master towards the memory. It changes only the timing and the
content of data beats. Requests are never reordered, dropped or split.
The source is `rtl/rate_controller.sv`.

**Read path.**
1. An AR request goes to memory in the same cycle.
2. At the same moment the controller stores two things under the request's AXI
   ID: the burst length, and the read latency in force at that moment.
3. Each R beat that comes back from memory passes three stages in this order:
   * error injection (`err_inject`),
   * latency insertion (`delay_queue`),
   * bandwidth throttling (`token_bucket`).
4. The latency for a beat is found by looking up its RID in the store
   (`id_map`). The record is removed when the burst's last beat leaves.

**Write path.**
1. AW goes to memory at once.
2. Its latency and length are queued in arrival order. AXI4 write data carries
   no ID and always follows AW order, so a plain FIFO is enough.
3. W beats pass their own error injector, delay queue and token bucket.
4. B responses pass through unchanged.

Read and write paths share nothing, so each direction can be slowed or
corrupted on its own. For example, errors can be injected on reads only, to
model read disturbance.

### Why the latency is looked up by ID

AXI4 lets a memory controller return bursts with different IDs in any order
and interleave their beats. Bursts with the same ID must come back in request
order. So when an R beat arrives, its RID alone says which request it belongs
to: it is the oldest outstanding burst with that ID. `id_map` keeps one
small FIFO of records per ID (DEPTH = 8 outstanding bursts per ID; a ninth
stalls AR). That one FIFO per ID is the "ordered map" of the paper.

The latency is recorded when the request is accepted, not when data returns.
So a latency register written in the middle of traffic only affects requests
issued after the write, and a burst is never split between two settings.

### How a beat's delay is measured

There is no per-request countdown timer. Instead `mc_timer` divides the
300-MHz clock into a one-cycle pulse every 100 ns (30 cycles) and counts
those pulses in a 32-bit `now` register.

When a beat enters the delay queue, it is stored together with two values:

* the current `now`, as a stamp;
* the latency recorded for its burst.

The beat at the head of the queue is released once `now − stamp ≥ latency`.
The subtraction is modular, so the counter may wrap.

The head-of-queue rule has two effects:
* Beats leave in arrival order. The AXI ordering and interleaving seen from
  memory is therefore kept exactly.
* A beat behind a slower head waits. This only happens when the latency
  setting was lowered while data was queued. Such a beat leaves no earlier
  than the head, which is what a real slower device in front of it would do.

The stamp is taken at some point inside a 100-ns tick. The extra wait is
therefore between (L − 1) × 100 ns and L × 100 ns, plus one clock cycle, for a
setting of L. On average it is (L − ½) × 100 ns. Latency 0 costs one cycle.

The queue is 256 beats deep, which covers 37 outstanding 64-byte reads
(148 beats). That 37 is the Cortex-A53 issue limit the paper quotes.

### Bandwidth: token bucket in bytes

The throughput register is in units of 10 MB/s, and 10 MB/s is exactly one
byte per 100 ns. So on every timer pulse the bucket gains *register value*
bytes.

* A 16-byte beat may pass only while the bucket holds at least 16 bytes.
  Passing it removes 16 bytes.
* The bucket holds at most 4096 bytes. That is the largest burst allowed
  after an idle period.
* A setting of 0 means no limit.

Bytes are counted per bus beat, whatever the strobes say.

### Errors: one random number per data bit

The error-rate registers hold a 32-bit probability p = rate / 2^32 per data
bit. That matches the paper's statement that error rates can be set at the
order of 2^-32.

* Each of the 128 data bits has its own 32-bit xorshift generator, with its
  own seed. The generator is a linear-feedback register with period 2^32 − 1.
* A bit is flipped when its generator's value is below `rate`.
* Generators advance once per accepted beat.
* On the write path, only bytes whose strobe is set can be flipped.

The number of flipped bits goes to the CSR counters. A rate of 0xFFFFFFFF is
the setting for "100 %" (p = 1 − 2^-32).

## Regions and ordering between them

The emulated DRAM appears at `MEM_BASE` = 0x10_0000_0000 (the 64-GB offset of
the paper's device trees). Each region starts at a `BOUNDARY` register, in
4-KB pages from `MEM_BASE`. A request goes to the region with the highest
start not above its address. Addresses below every start go to region 0.
After reset, the two regions start at 0 and 2 GB. That is the two-node NUMA
set-up of the paper. Setting region 1's start to 4 GB or more gives one 4-GB
region, which is the paper's NVDIMM set-up.

This is the subtle part of the design. Different regions add different
latencies. A CPU can issue two reads with the same ID, first to a slow region
and then to a fast one. Without care, the second read would finish first,
which breaks the AXI same-ID rule.

`region_demux` prevents this as follows:

* For each ID and each direction, it keeps a count of outstanding requests and
  the region they went to.
* The count rises at AR or AW.
* It falls at the last R beat, or at B.
* A request whose ID is outstanding at another region is held until that
  count reaches zero.

Requests with the same ID to the same region are never held. Neither are
requests with different IDs. So the normal parallelism of a multi-core CPU is
kept.

W data follows its AW to the right region through a queue of region numbers.
R and B from the regions are merged round-robin, and an R burst keeps the
grant until RLAST.

`mem_mux` joins the regions onto the single memory-controller port. It
arbitrates AR and AW round-robin. It widens each ID by the region number
(memory-side ID width = 6 + log2(regions)), so the two regions never share an
ID at the controller. It routes R and B back by those upper ID bits.

Moving a boundary while requests are in flight is safe for the bus. Each
request is decoded once, when it is accepted. A region then keeps the
parameters it had when each of its requests was accepted.

## Registers

The registers are behind a 32-bit AXI4-Lite slave (`mc_csr`), with one 64-byte
bank per region at `bank × 0x40`:

| Offset | Name | Meaning | Reset |
|---|---|---|---|
| 0x00 | BOUNDARY | region start, 4-KB pages from MEM_BASE | bank × 0x80000 |
| 0x04 | RD_LAT | inserted read latency, 100 ns | 0 |
| 0x08 | WR_LAT | inserted write latency, 100 ns | 0 |
| 0x0C | RD_THPT | read bandwidth limit, 10 MB/s, 0 = none | 0 |
| 0x10 | WR_THPT | write bandwidth limit, 10 MB/s, 0 = none | 0 |
| 0x14 | RD_ERR | read bit-flip probability × 2^32 | 0 |
| 0x18 | WR_ERR | write bit-flip probability × 2^32 | 0 |
| 0x20/0x24 | RD_BYTES | read bytes delivered (64-bit, lo/hi) | 0 |
| 0x28/0x2C | WR_BYTES | write bytes delivered | 0 |
| 0x30/0x34 | RD_BERR | bits flipped in read data | 0 |
| 0x38/0x3C | WR_BERR | bits flipped in write data | 0 |

Latency, throughput and boundary use 16, 16 and 32 bits of their words.
Reading a counter's low word latches its high word, so a low-then-high read
returns one consistent 64-bit value. A write takes effect in the next cycle.

## Top level and parameters

`meticulous_top` has three ports, one clock and an active-low asynchronous
reset:

* `s_*`: an AXI4 slave for the CPU's memory traffic. It has 128-bit data,
  6-bit IDs and 40-bit addresses. AR and AW payloads are the `ax_t` struct,
  R is `r_t` and W is `w_t` (see `rtl/mc_pkg.sv`).
* `csr_*`: the AXI4-Lite register port.
* `m_*`: an AXI4 master to the DDR4 controller, with IDs widened by the
  region bits.

Parameters, with their defaults:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_REGIONS` | 2 | number of regions |
| `MEM_BASE` | 0x10_0000_0000 | where the emulated DRAM starts |
| `CLK_MHZ` | 300 | clock frequency; sets the 100-ns divider |
| `REGION_PAGES` | 0x80000 | reset size of each region, in 4-KB pages |
| `DLY_DEPTH` | 256 | delay queue depth, in beats |
| `MAP_DEPTH` | 8 | outstanding bursts per ID per region |

The bus widths and register widths are in `mc_pkg`. At the defaults, the top
synthesises to roughly 6,000 cells, 20,000 flip-flop bits and 220 kbit of
memory arrays. Most of that memory is the delay queues and the per-ID maps.

## Simulating

Every testbench is self-checking. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Run one with plain
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/mc_pkg.sv tb/tb_meticulous_top.sv --top-module tb_meticulous_top
./obj_dir/Vtb_meticulous_top
```

| Testbench | What it checks |
|---|---|
| `tb_mc_timer` | 30-cycle pulse period, `now` increments |
| `tb_err_inject` | rates 0, 10 % and 2^32−1; strobe masking; flip count vs. Hamming distance; stalls |
| `tb_id_map` | per-ID FIFO order against a reference model, full-FIFO refusal |
| `tb_delay_queue` | release of each beat against a reference queue, order, full queue, minimum wait |
| `tb_token_bucket` | beats per tick at several rates, burst size after idle, unlimited setting |
| `tb_rate_controller` | data and per-ID order, inserted read/write latency in cycles, both bandwidth limits, error counts, byte counters, settings changed with bursts in flight |
| `tb_mc_csr` | every register, reset values, counter accumulation, lo/hi latching |
| `tb_region_demux` | address decode, same-ID order across a slow and a fast region, overtaking of different IDs, boundary move |
| `tb_mem_mux` | ID widening, response routing, data integrity, fair grants under contention |
| `tb_meticulous_top` | whole design at default parameters (see below) |
| `tb_microbench` | the paper's microbenchmarks as register sweeps (see below) |

`tb/axi_mem_model.sv` stands in for the DDR4 controller and DRAM. It is a
behavioural AXI4 slave with sparse storage, a fixed response latency and
optional random stalls.

`tb_meticulous_top` runs the unmodified top with random multi-ID traffic to
both regions. It compares all read data with a reference memory. It counts
each mechanism and fails if any never happened:

* inserted read and write delay,
* read and write throttling,
* read and write bit flips,
* requests held for same-ID ordering,
* a boundary move under traffic.

`tb_microbench` repeats the paper's measurements. With a 40-cycle memory model
and no inserted delay, the round trip is about 150 ns. The results are:

* **Latency.** Sweeping the read delay, then the write delay, then both at
  once (read d, write 2800 ns − d), from 0 to 2800 ns adds each setting to
  its own direction's base, within one 100-ns tick.
* **Bandwidth.** Read limits of 100–700 MB/s and write limits of
  100–400 MB/s are met within the 3 % the test allows (the measured rates
  were on the limit).
* **Errors.** Read and write error rates from 0 to 100 % are measured within
  the allowed 1.5 percentage points (observed: within 0.3).

The paper's own measurements saturate near 450 MB/s and show about 400 ns
base latency. Those figures come from the SoC's CPU and interconnect, which
are not part of this RTL.

## What follows the paper and what was chosen here

**Follows the paper:**
* Rate controllers per region, each with the three stages in the order
  error → delay → throttle, on both R and W.
* AR/AW bookkeeping with an ordered per-ID map.
* A token bucket refilled by a 100-ns pulse.
* Latency measured against a shared current-time counter.
* Per-bit LFSR-driven error injection.
* Region offsets set by software.
* The units of the configuration interface: 100 ns and 10 MB/s.
* The 128-bit, 300-MHz data path.

**Chosen here:**
* **One CPU port with an address demux, and one memory port with a mux.** The
  paper's figure draws each rate controller with its own connection. On a
  real SoC the CPU reaches the fabric through one AXI port, so the demux, and
  the same-ID hold across regions that it needs, are this design's way to
  share it.
* **Register layout, widths, reset values and the 4-KB boundary unit.** The
  paper names the settings and statistics but gives no map.
* **Regions are set by start offsets only.** One passage speaks of a start
  address and a size per region, but the configuration call sets only a
  start offset. Here a region ends where the next one starts, and the last
  region runs to the end of the address space. So there are no gaps, and no
  address goes without a region.
* **Error-rate encoding.** The paper's API names a percentage argument, while
  its text states a 2^-32 resolution. The hardware takes the 32-bit
  probability; converting a percentage is left to the driver.
* **Queue sizes:** 256-beat delay queue, 8 bursts per ID, 4-KB bucket.
* **Byte counting** in whole 16-byte beats.
* **Latency resolution:** the 100-ns grid gives the ±1 tick described above.
* **A single clock domain.**
* **Generator type:** xorshift32 per bit.
* **Not included:** the CPU, the vendor DDR4 controller IP and the DRAM module.
  They are outside the design, and the testbenches model the memory side
  behaviourally. The configuration library, command-line tool and device-tree
  descriptions are software and are not part of this RTL.
