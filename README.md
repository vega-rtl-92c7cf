# Vega-style IoT end-node SoC in SystemVerilog

This RTL describes an always-on IoT processor that spends most of its life asleep. A tiny **cognitive wake-up unit (CWU)** keeps watching external sensors at microwatt power and recognises patterns with hyperdimensional computing (HDC). Only when the pattern of interest appears does it wake the rest of the chip:

- a **SoC domain**: a fabric-controller port, 1.5 MB of interleaved L2 and an I/O DMA;
- a **4 MB non-volatile MRAM**, which lets the chip keep its program and data at zero retention power;
- a **9-core compute cluster** with a hardware convolution engine (HWCE) for DNN inference.

The processor cores, FPUs, standard peripherals and analog parts are not part of this RTL. Their interfaces are ports of the top module `vega_soc`, so a core model or a testbench can drive them.

## Clock and power domains

| Domain | Clock input | Contents |
|---|---|---|
| SoC | `soc_clk_i` | L2 memories, SoC interconnect, uDMA, SoC side of all bridges |
| Cluster | `cl_clk_i` | TCDM, HWCE, cluster DMA, event unit, FPU interconnect |
| MRAM | `mram_clk_i` | MRAM controller and macro model |
| Always-on | `aon_clk_i` | CWU, power manager (PMU), RTC |

Every crossing between domains uses the same dual-clock memory bridge (`cdc_mem_bridge`), built from two Gray-pointer FIFOs (`dc_fifo`). The bridge counts outstanding requests as credits, so a response always finds room in its return FIFO.

The PMU (`pmu`) owns the power state, which is one of four modes from `vega_pkg::pmode_e`:

| Mode | Powered |
|---|---|
| `PM_CWU_SLEEP` | always-on logic and the CWU only |
| `PM_CWU_RET` | as `PM_CWU_SLEEP`, plus the L2 banks chosen in `RET_MASK` kept in retention |
| `PM_SOC` | SoC domain |
| `PM_CLUSTER` | SoC and cluster domains |

**Changing mode**
- Software writes the wanted mode to the PMU.
- Switching a domain off asserts its reset first.
- Switching a domain on closes its power switch. Its reset is released `PWR_DLY` always-on cycles later.

**Waking up**
- While the SoC is off, an enabled wake source moves the chip back to `PM_SOC`. The sources are the pad, the RTC alarm and the CWU interrupt.
- `WAKE_CAUSE` records which source it was.
- A boot-source bit tells the boot code where to restore state from: the retained L2, or the MRAM.

The power switches themselves are outside this RTL. Their enables leave the top as `pwr_*_o` and `ret_o`. After reset the chip is in `PM_SOC` with the cluster held in reset, so software must request `PM_CLUSTER` before it uses the cluster.

## The memory bus

All memory-mapped traffic uses one protocol, defined in `vega_pkg`.

- **Request** (`mem_req_t`): `req`, `we`, `be`, `addr`, `wdata`.
- **Response** (`mem_rsp_t`): `gnt`, `rvalid`, `rdata`.
- A master holds `req` until it sees `gnt`.
- Every request gets exactly one `rvalid`, writes included, and responses come back in order.
- Memories and the logarithmic interconnect answer exactly one cycle after the grant.
- Register blocks grant at once and answer one cycle later.

Routing blocks:

| Block | Function |
|---|---|
| `log_interconnect` | Word-interleaved crossbar: bank = word address modulo the bank count. Round-robin arbitration per bank; a `bank_conflict_o` flag marks refused masters. Used for the 16-bank L1 (TCDM) and for both L2 memories. |
| `addr_demux` | Address decoder built from base/mask pairs; the lowest matching index wins. Unmatched addresses get a zero response. One transfer in flight. |
| `mem_mux` | Round-robin merge of several masters onto one port. A small ID FIFO steers the in-order responses back. |

### Address map

| Region | Base | Notes |
|---|---|---|
| Cluster L1 (TCDM) | `0x1000_0000` | 128 kB, 16 banks |
| Cluster peripherals | `0x1020_0000` | +0x0000 DMA, +0x1000 HWCE, +0x2000 event unit |
| SoC peripherals | `0x1A10_0000` | +0x0000 uDMA, +0x1000 MRAM interface, +0x3000 PMU, +0x4000 RTC, +0x8000 CWU |
| FC private L2 | `0x1C00_0000` | 64 kB, 2 banks |
| Interleaved L2 | `0x1C20_0000` | 1.5 MB in 4 banks of 98304 words |

Three masters reach the SoC memories, each through its own decoder: the fabric-controller port `fc_req_i`, the uDMA, and the cluster's external port. The always-on blocks sit behind a clock-domain bridge off the SoC peripheral bus.

## Cluster

Each of the nine core data ports (`core_req_i`) is decoded three ways:

- to its own port on the TCDM interconnect;
- to the cluster peripheral bus;
- to the external port towards the SoC.

Four HWCE ports and one DMA port also share the TCDM, for 14 masters on 16 banks.

**Cluster DMA** (`cluster_dma`)
- It copies `LEN` words between L1 and another region. A load unit streams into a store unit, so reads and writes overlap.
- Its completion is an event for the event unit.

**Event unit** (`event_unit`)
- It implements barriers and event waits.
- A waiting core's clock enable goes low. Its clock and a release pulse return two cycles after the releasing condition.
- An event line enters a pending register first, so release comes three cycles after the line itself.

**FPU sharing** (`fpu_share_ic`)
- Four FPUs are shared with a fixed mapping: cores 0/4, 1/5, 2/6 and 3/7/8.
- Each FPU has a round-robin arbiter, and results return by a tag that holds the core index.

**HWCE** (`hwce`, with `hwce_linebuf`, `hwce_sop`, `hwce_unpack`, `hwce_pack`, `stream_ld_unit`)
- It computes 3×3 convolutions for up to three output filters per job.
- Weights, pixels and partial sums can be 16, 8, 4 or 2 bits, packed into 32-bit words with the lowest element first.
- A line buffer builds the sliding window.
- Each sum-of-products unit splits every 16-bit operand into a signed high byte and an unsigned low byte. It reduces the four kinds of sub-products over the nine taps separately, then combines them.
- Results are shifted right, saturated and repacked.
- A second job can be queued while one runs (register shadowing).
- Register map: see the opening comment of `rtl/hwce.sv`.

## MRAM subsystem

`mram_if` holds the registers, in the SoC clock domain:

| Offset | Register |
|---|---|
| 0x0 | MRAM word address |
| 0x4 | word count |
| 0x8 | command |
| 0xC | status |

Data moves through uDMA channel 0. The uDMA TX stream feeds writes and the RX stream returns reads. Commands, data and status cross to the MRAM clock in dual-clock FIFOs.

The controller (`mram_ctrl`) packs two 32-bit words into each 64-bit MRAM word and adds 14 check bits, giving 78 stored bits. The check bits are interleaved parity: they detect errors and set a sticky error flag, but they do not correct anything. The MRAM array is a behavioural model (`mram_macro`), with fixed read and write latencies and a busy output while it is powered off.

## Cognitive wake-up unit

The CWU is a three-stage stream on the always-on clock.

1. **`cwu_spi_master`**
   - A 16-entry micro-program of transfers and waits runs in an endless loop.
   - It supports all four SPI modes and four chip selects, with SCLK at half the unit clock.
   - Received words leave tagged with a channel number.
2. **`cwu_preproc`**
   - Per-channel processing in this order: arithmetic shift, offset removal, low-pass filter, optional 8-bit local binary pattern, subsampling.
   - Offset removal and the low-pass filter are exponential moving averages with power-of-two decay, each keeping 8 fraction bits.
   - A disabled channel's samples are dropped.
3. **`hypnos`** (HDC accelerator)
   - `hdc_ctrl` runs up to 64 micro-instructions of 26 bits in a loop, with a one-level hardware loop.
   - `hdc_vector_encoder` is a 512-bit datapath with:
     - an input mux (zero, seed, AM row, register);
     - a bit-flip similarity manipulator;
     - four fixed permutations, `p(i) = (A·i + B) mod 512` and their inverses;
     - per-bit XOR/AND/NOT;
     - 512 saturating 8-bit bundling counters.
   - A sample becomes a quasi-orthogonal vector by applying one of two permutations per input bit, starting from a fixed seed.
   - `hdc_am` holds 64 rows of 512 bits and searches a row range for the smallest Hamming distance, one row per cycle.
   - The `INTR` instruction raises the wake request when the best row is the target class and its distance is below a threshold.
   - The instruction encoding is described at the top of `rtl/hdc_ctrl.sv`.

## Where this RTL departs from the original design

- **Interfaces:** AXI between cluster and SoC, and APB for peripherals, are replaced by the single request/response protocol above.
- **Hypnos:** only 512-bit HD vectors. The 1024 to 2048-bit modes are not built.
- **HWCE:** only 3×3 filters. There is no 5×5 mode and no internal partial-sum buffer.
- **MRAM ECC:** detection only.
- **Memory cells:** SRAMs are plain arrays. The associative memory and the micro-code stores use flip-flops, not latches.
- **Unpublished details:** all register maps, instruction encodings, the permutation constants, the seed and the filter equations are choices made here. The original design does not publish them.
- **Not built:** the processor cores, instruction caches, FPUs and divider, I/O peripherals other than the uDMA, HyperBus, CSI-2, FLLs, regulators, body-bias generators and pads.

## Verification

Each testbench in `tb/` checks its results against its own model. It prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | Covers |
|---|---|
| `tb_hwce_sop` | sum-of-products unit, 2004 vectors against a 64-bit reference |
| `tb_log_interconnect` | 4 masters on 4 SRAM banks; random masked reads and writes; conflicts and one-cycle latency |
| `tb_cdc_mem_bridge` | dual-clock FIFO ordering, and pipelined bridge traffic across unrelated clocks |
| `tb_event_unit` | barrier and event release, clock gating and resume latency |
| `tb_fpu_share_ic` | nine cores contending for four FPU models; static mapping and per-core result order |
| `tb_vega_soc` | the whole chip at its full default size (described below) |

`tb_vega_soc` works through these steps:

1. The fabric controller writes a tile into L2.
2. The cluster is powered up, and the cluster DMA brings the tile into L1.
3. Four cores modify it in parallel.
4. The DMA writes it back to L2, and the result is checked.
5. A barrier is run, and three cores contend for one FPU.
6. Software sends the chip into retentive sleep. The RTC wakes it, and L2 content is checked again.

It counts L2 and TCDM bank conflicts, FPU contention, DMA jobs, barrier releases, mode switches and RTC wake-ups. Any of these that never happens is a failure. The run takes seconds.

The uDMA, the MRAM path, the HWCE as a whole and the CWU chain compile inside the top but do not yet have testbenches of their own.

To simulate with plain Verilator, list the package first:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/vega_pkg.sv $(ls rtl/*.sv | grep -v vega_pkg) \
    tb/tb_vega_soc.sv --top-module tb_vega_soc
./obj_dir/Vtb_vega_soc
```
