# NeoProf: a device-side hot page profiler for CXL memory

A CPU that uses CXL-attached memory reaches it with ordinary loads and stores. The operating system therefore cannot see which pages of the slow tier are hot without expensive page-table scans, hint faults or CPU sampling. NeoProf moves that observation to the memory device itself. It sits next to the device's memory controller, sees every CXL.mem request, and counts accesses per 4 KB physical page. It counts in a small fixed-size Count-Min sketch rather than one counter per page. Whenever a page's estimated count rises above a threshold θ, the page number goes into a hot page buffer, once per detection period. The host reads the buffer through a handful of memory-mapped commands and promotes those pages to fast memory.

NeoProf also reports two things the host's migration policy needs:
- **Link usage:** sampled cycles, read-data cycles and write-data cycles, from which the host gets bandwidth utilisation and the read/write mix.
- **Count distribution:** a 64-bin histogram of the first sketch row. The host reads off a percentile as an error bound on the sketch estimate, and as a picture of how skewed the access frequencies are.

This repository holds synthesizable SystemVerilog-2017 for the whole profiler, at the sizes of the reference configuration, plus self-checking testbenches. The CXL controller, memory controller, DRAM and host software are not included. Their signals are ports of the top module.

## Reference configuration

| Quantity | Value | Where it is set |
|---|---|---|
| Page address (4 KB pages) | 32 bits (16 TB per controller) | `PAGE_ADDR_BITS` |
| Sketch lanes (rows) D | 2 | `SKETCH_LANES` |
| Sketch width W | 512 K entries per lane | `SKETCH_WIDTH` |
| Counter | 16 bits, saturating | `COUNTER_BITS` |
| Memory segments (pipeline stages) K | 128 | `SKETCH_SEGMENTS` |
| Hot page buffer | 16 K page addresses | `HOT_BUF_ENTRIES` |
| Histogram bins | 64 | `HIST_BINS` |
| Histogram bin width | 16 counts (2^4) | `HIST_BIN_SHIFT` (own choice) |
| H3 pipeline stages M | 4 | `HASH_STAGES` (own choice) |
| State sample window | 256 memory cycles | `STATE_WINDOW` (own choice) |
| Clock-crossing FIFO depth | 16 | `CDC_FIFO_DEPTH` (own choice) |
| MMIO data | 64 bits | `MMIO_DATA_BITS` (own choice) |

Every constant lives in `rtl/neoprof_pkg.sv`, and every module takes it as a typed parameter. No size has been scaled down from the reference configuration.

## Counting with a Count-Min sketch

The sketch has D rows of W entries. Each row has its own hash function. An access to page P increments entry h_d(P) in every row d. The estimate of P's access count is the minimum over the D rows. Collisions can only add to a counter, so the estimate never undercounts. P is hot when that minimum exceeds θ (strictly greater).

Each entry holds three fields:
- a 16-bit counter;
- a **Valid** bit;
- a **Hot** bit.

A detection period ends with a Reset. Rewriting 1 M counters would take a million cycles, so Reset clears only the Valid bits. The Valid bits of a lane are kept as one flat vector per memory segment, so they all clear in a single cycle. A counter whose Valid bit is clear reads as zero, and the next increment writes 1 and sets the bit. The Hot bits are cleared the same way. Counters saturate at 65535 instead of wrapping.

## The hot page filter

Once a page crosses θ, every later access to it is also "hot". Reporting all of them would fill the buffer with duplicates. The Hot bits act as a Bloom filter that reuses the sketch's hash indices:
- A hot page whose Hot bits, in all its D hashed entries, are already set is treated as already reported and dropped.
- A hot page with at least one Hot bit clear is new. Its address goes into the hot page buffer, and its Hot bits are set.

Like any Bloom filter this can wrongly drop a page, when other hot pages happen to have set all of its bits. It never reports a page twice in one period.

## Detector pipeline

A page address entering the detector passes through these stages, one page per core clock:

1. **H3 hashing** (`h3_hash`, one per lane). The index is h(x) = x(0)·π(0) ⊕ … ⊕ x(31)·π(31). Each π(i) is a fixed 19-bit seed word, and x(i)·π(i) means the word ANDed with bit i. The 32-term XOR tree is cut into M=4 register stages, each folding 8 address bits into a running hash. Each lane gets different seeds. The seeds come from a multiply/xor-shift mixer of (lane, bit) evaluated at elaboration. The mixer must not be linear over GF(2): with a pure xor-shift mixer the lane number cancels out of the XOR of an even number of seeds, and both lanes would send most pages to the same entry.
2. **Pipelined sketch lanes** (`sketch_lane`, one per lane). A lane's W entries are split into K=128 segments of 4096 entries. Each segment is one pipeline stage. A request moves one segment per cycle. In the segment that owns its index it does a read-modify-write of the counter and Valid bit, and it leaves with the new count. Because each segment sees a given request in exactly one cycle, back-to-back requests to the same entry need no forwarding. The next request reaches the segment only after the previous write. Latency is K+1 cycles.
3. **Hot page checker** (`hot_page_checker`): the minimum of the D counts, compared with θ. One cycle.
4. **Pipelined Hot bit lanes** (`hotbit_lane`, one per lane). They are segmented and pipelined like the sketch lanes, and use the same index. Each returns the entry's Hot bit as it was before the request, and sets it if the page is hot. Latency is K+1.
5. **Hot page filter** (`hot_page_filter`): new = hot AND (any old Hot bit clear). One cycle.

The detector (`hot_page_detector`) chains these. Its latency from page in to new/duplicate out is M + (K+1) + 1 + (K+1) + 1 cycles, which is 264 core cycles at the reference sizes. Its throughput is one page per cycle with no stalls.

In this design the Hot bits sit in a second segmented array placed after the checker, rather than in the same memory word as the counter. This lets the update happen once the hot/not-hot decision is known, without a second pass through the sketch. Every hot page sets its Hot bits, not only new ones. Setting a bit that is already set changes nothing, so this matches the "set on new hot page" rule.

## Histogram

`histogram_unit` starts on the SetHistEn command:
1. It clears 64 bin counters.
2. It reads all W entries of sketch lane 0 through a separate scan port, one per cycle.
3. Each valid entry adds one to bin min(count >> 4, 63). Entries not touched in this period are skipped, so the bins describe only the pages seen.

The scan takes W+3 cycles, about 1.3 ms at 400 MHz for W=512K. Detection continues during the scan, so the histogram is a snapshot taken over the scan window. The host then reads the 64 bins in order. It accumulates them until p % of the total, which gives the percentile it uses as an error bound; for D=2 that is the median. The bin width of 16 counts is this design's choice. Only the bin count of 64 and the use of the first row are given.

## Clock domains and monitors

- **Memory clock** (the controller's clock):
  - `page_monitor` registers each snooped request and keeps bits [43:12] of the byte address as the page number. It pushes the page number into the Page Addr FIFO.
  - The profiler must never stall memory traffic. So a request that finds the FIFO full is dropped and counted, and the count is the `page_drops` output.
  - `state_monitor` counts cycles, read-data cycles and write-data cycles in windows of 256 cycles. It pushes each window as a 96-bit sample into the State FIFO. If that FIFO is full, the window simply grows, so no cycle is lost.
- **Core clock** (slower):
  - `neoprof_core` pops one page per cycle into the detector.
  - It pushes new hot pages into `hot_page_buffer`, a 16 K-entry ring FIFO. When the buffer is full it drops and counts new pages.
  - It adds the state samples into 64-bit totals.
- **Crossing:** `async_fifo` is a conventional dual-clock FIFO. It uses Gray-coded pointers, two-flop synchronisers and a first-word fall-through read, and each side is reset by its own domain reset.

## Command map

The host drives the profiler through an MMIO window. Each command is one offset. A write takes one core cycle. Read data appears on `mmio_rdata` with `mmio_rvalid` one cycle after `mmio_rd`.

| Offset | Command | Access | Effect |
|---|---|---|---|
| 0x100 | Reset | write 1 | new detection period: clears Valid and Hot bits, hot page buffer, state totals, histogram |
| 0x200 | SetThreshold | write / read | θ (low 16 bits); resets to 0xFFFF, so nothing is hot until set; Reset keeps θ |
| 0x300 | GetNrHotPage | read | number of pages in the hot page buffer |
| 0x400 | GetHotPage | read | removes and returns the oldest hot page; all ones when empty |
| 0x500 | GetNrSample | read | total sampled memory cycles |
| 0x600 | GetRdCnt | read | cycles carrying read data |
| 0x700 | GetWrCnt | read | cycles carrying write data |
| 0x800 | SetHistEn | write 1 | starts a histogram scan |
| 0x900 | GetNrHistBin | read | 64 when the histogram is ready, 0 while it is being built |
| 0xA00 | GetHist | read | next bin count, bin 0 first, wrapping after bin 63 |

The offsets and what each command does follow the reference description. These are this design's choices: the strobe interface, the 64-bit width, the empty marker, the reset value of θ, and the behaviour of the histogram commands while the histogram is not ready. An assertion flags a read and a write in the same cycle.

## Departures and open points

- **Own choices, not given in the reference description:**
  - seed values of the hash;
  - number of hash stages;
  - histogram bin width;
  - state window length;
  - FIFO depths;
  - dropping on a full Page Addr FIFO and on a full hot page buffer;
  - placement of the Hot bits in their own pipelined array;
  - saturating counters.
- **Core clock rate:** the core accepts one page per core cycle. If the core clock is slower than the request rate, sustained full-rate traffic overflows the Page Addr FIFO, and the overflow is counted. The reference prototype does not give its core clock.
- **Hardware-area scaling:** the reference ASIC estimate used W=256K per lane. W is a parameter; set it to 256K for that configuration.
- **Memories:** the sketch, Hot bit and buffer memories are written as plain arrays. A real implementation would map the counters and the buffer to SRAM macros, keeping the Valid and Hot bits in flops so they can be cleared at once.
- **Reset lint:** a linter reports the core reset as used both synchronously and asynchronously, because the core's assertion uses it in `disable iff`. This is expected.

## Files

`rtl/`: `neoprof_pkg` (constants, command enum, state sample struct, seed function), `neoprof_top`, `page_monitor`, `state_monitor`, `async_fifo`, `neoprof_core`, `hot_page_detector`, `h3_hash`, `sketch_lane`, `hot_page_checker`, `hotbit_lane`, `hot_page_filter`, `hot_page_buffer`, `histogram_unit`.

`tb/`:
- `tb_<module>` for every module. Each compares against its own model, computed independently of the RTL. Most run at reduced sizes.
- `tb_neoprof_top` runs end to end at reduced sizes. Every mechanism happens there at least once, and the testbench counts each one:
  - clock crossing;
  - new and filtered hot pages;
  - counter saturation;
  - hot page buffer overflow;
  - Page Addr FIFO overrun;
  - histogram;
  - threshold change;
  - Reset.
- `tb_neoprof_top_full` runs the top with no parameter overrides, one complete period at the reference sizes.
- Both top testbenches share `neoprof_top_tb_body.svh` and the reference sketch model `neoprof_ref_model.svh`. The model predicts:
  - the exact sequence of hot pages;
  - the state totals;
  - every histogram bin.

## Simulating

With Verilator 5 (the package must come first):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_neoprof_top \
    rtl/neoprof_pkg.sv rtl/*.sv tb/tb_neoprof_top.sv -Itb -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops, and a watchdog stops a hung run. The full-size run needs about 30 s, most of it compiling. Unit testbenches run in seconds.

To change a size, override the parameters on `neoprof_top` or edit `neoprof_pkg`. These constraints apply:
- W must be a power of two and a multiple of K.
- The FIFO depth must be a power of two, at least 4.
- CNT_W bounds θ.
