# TicToc: a DRAM-cache controller that keeps tags both inside and outside the line

A few gigabytes of DRAM in front of a large, slow, non-volatile main memory
(3D-XPoint) work as a hardware-managed cache. At 64-byte line granularity a
4GB cache has 2^26 lines, so its tags (one byte per line: 6 tag bits, a dirty
bit, a valid bit) add up to 64MB. That is far too much for on-chip SRAM, so
the tags have to live in DRAM too. They can live in one of two places:

* **TIC, tag inside the cache line.** The byte sits in the spare ECC bits of
  each line, so one DRAM read returns data and tag together. A hit costs
  one access. A miss also costs one access, which is wasted: the line has to
  be read only to find out that it is the wrong one.
* **TOC, tag outside the cache line.** The bytes of 64 neighbouring sets are
  packed into one 64-byte metadata line in a reserved DRAM region. Recently
  used metadata lines are kept in a small on-chip metadata cache. A miss
  can then be confirmed with no DRAM access at all. Every install and
  every clean-to-dirty change, however, must also update the metadata
  line.

TicToc keeps **both** copies. A PC-based hit/miss predictor decides which
copy each read consults: predicted hits read the line (TIC), and predicted
misses consult the metadata cache (TOC). Keeping the TOC copy up to date
costs bandwidth, and most of that cost comes from dirty bits. Three
mechanisms remove most of it:

* **DCD, DRAM-cache dirtiness bit.** Each line of the last-level cache
  already carries a DCP bit ("this line is also in the DRAM cache").
  DCD is a second bit beside it: "the DRAM-cache copy is already marked
  dirty in the TOC". A writeback that arrives with both bits set is a
  single DRAM write, and the TOC is not touched.
* **PDM, preemptive dirty marking.** A line that will probably be written
  is installed in a "Predicted-Dirty" state: dirty in the TOC, clean in the
  TIC. Its later writebacks then need no TOC update. If the prediction was
  wrong, the price is one extra read when the line is evicted. The TOC says
  "dirty", so the victim is probed; its TIC bit says "clean", so no
  memory write follows.
* **SWP, signature-based write predictor.** This decides which lines get
  PDM. For one line in every metadata line, the TOC also stores the
  installing PC (9 bits) and a written-to bit. When such a sampled line
  is evicted, a 3-bit counter indexed by that PC counts up if the line
  was written and down if not. A non-zero counter means "write-likely".

A **write-aware bypass** decides what gets installed on a miss:

| Miss type | Decision |
|---|---|
| Writeback that misses | Always installed, so the DRAM cache buffers writes in front of the slower memory. |
| Read miss predicted write-likely | Always installed. |
| Any other read miss | Bypassed 90% of the time. |

Both the DRAM cache and the 3D-XPoint memory share **one channel**. Every
access the controller saves is bandwidth handed back to useful work, so
the rest of this document counts accesses.

## What the RTL contains

| File | What it is |
|---|---|
| `rtl/tictoc_pkg.sv` | Shared types: metadata byte, sampling record, channel command/response, event pulses |
| `rtl/hit_miss_predictor.sv` | Per-core tables of 3-bit counters indexed by a PC hash; predicts DRAM-cache miss |
| `rtl/write_predictor.sv` | SWP: 512 x 3-bit counters indexed by PC mod 512, trained by sampled evictions |
| `rtl/metadata_cache.sv` | 512-entry direct-mapped cache of 64-byte TOC metadata lines (32KB), write-back |
| `rtl/write_aware_bypass.sv` | Install/bypass decision with a 16-bit LFSR for the 10% draw |
| `rtl/tictoc_top.sv` | The controller: request FSM, channel sequencing, DCP/DCD, PDM, SWP training |

The top instantiates the four blocks. Its defaults are the configuration
the design was sized for:

| Parameter | Default | Meaning |
|---|---|---|
| `CORES` | 8 | Number of cores. |
| `SET_BITS` | 26 | 4GB of 64B lines. |
| `MC_ENTRIES` | 512 | Metadata-cache entries (32KB). |
| `HMP_ENTRIES` | 256 | Hit/miss counters per core. |
| `SWP_ENTRIES` | 512 | Write-predictor counters. |
| `INSTALL_PER_MILLE` | 100 | Clean read misses installed per thousand, i.e. 90% bypassed. |

A line address is 32 bits: a 6-bit tag over a 26-bit set index. That covers
256GB, so the 64GB main memory fits with room to spare.

## Where the metadata lives

```
cache line  (DEV_CACHE, address = set)   : data[511:0] + sideband[63:0]
                                           sideband[7:0] = {valid, dirty, tag[5:0]}   <- TIC
metadata line (DEV_META, address = set>>6): 64 bytes, byte k = {valid, dirty, tag} of set (mline<<6)+k  <- TOC
                                           sideband[10:0] = {sig_valid, written, sig[8:0]} of slot 0
```

* Slot 0 of every metadata line is the sampled line, which is 1 line in 64.
* Its sampling record rides in the metadata line's own sideband. The TOC
  bytes stay one byte per line; only the sampled line carries the extra
  bits.
* The record has one bit beyond the signature and the written-to bit:
  `sig_valid`. A line that was installed by a writeback has no installing
  PC, so when it is evicted it must not train any counter. `sig_valid`
  marks whether the signature is real.
* Upper sideband bits are driven as zero: they are left for the ECC code,
  which is added by the memory controller and is not part of this design.

The metadata cache holds whole metadata lines. An entry becomes modified
when:

* an install changes a TOC byte;
* a writeback sets a TOC dirty bit;
* a sampled line's written-to bit is set.

A modified entry is written back to the metadata region when it is
replaced.

## The two paths, and what each costs

Each request runs to completion before the next one is accepted. The
channel counts below are what the directed testbench checks, request by
request. They are the point of the design.

**Read, predicted hit (TIC path).**

1. Read the cache line.
2. If the tag matches, it is a hit. The request cost **1 access**.
3. If the tag does not match, the victim's data and its TIC dirty bit have
   already arrived. The controller reads the 3D-XPoint line, then installs
   or bypasses it. If the victim is dirty and the line is installed, the
   victim is written to memory first.
4. This is the expensive mispredicted case: cache read, memory read, and
   possibly install and victim write.

**Read, predicted miss (TOC path).**

1. Look up the metadata cache.
2. If the metadata cache misses:
   * The 3D-XPoint read is issued first, in parallel with the metadata-line
     fetch, so a true miss pays only the memory latency.
   * A modified occupant of the metadata-cache entry is written back first.
   * If the TOC then says the line is resident, the speculative memory read
     is discarded and the cache line is read instead.
3. If the metadata cache hits, the TOC decides:
   * Resident: read the line, **1 access**.
   * Not resident, victim clean in the TOC: read memory and install,
     **2 accesses**, or **1** if bypassed.
   * Not resident, victim dirty in the TOC: the victim must be probed (read)
     to get its data and its TIC dirty bit. If the TIC bit is set, the
     victim is written to memory.
     * A Predicted-Dirty victim that was never written costs
       **3 accesses**: probe, memory read, install.
     * A truly dirty victim costs **4**: probe, memory read, victim write,
       install.

**Writeback from the last-level cache.**

* **DCP and DCD set:** write the line, TIC dirty = 1, **1 access**. This is
  the DCD saving.
* **Otherwise, consult the TOC** (through the metadata cache):
  * **Line resident:**
    * Write the line.
    * If the TOC dirty bit is clear, set it in the metadata cache. This is
      the "TOC dirty-bit update" that PDM and DCD exist to avoid.
    * If the TOC dirty bit is already set, the line was Predicted-Dirty and
      nothing more is done.
    * For the sampled slot, also set the written-to bit.
  * **Line not resident:**
    * Write-allocate: install with TIC dirty = 1 and TOC dirty = 1.
    * A dirty victim is probed and written to memory first.
* **Without PDM,** a line that is read, installed clean, and later written
  costs:
  1. the install;
  2. the write;
  3. reading the TOC metadata line;
  4. writing the TOC metadata line back.

  That is **4 accesses**. With PDM the same line costs **2**: the install
  and the write.

**DCP and DCD handed back to the last-level cache** with every read:

* **DCP** is 1 when the line is (now) in the DRAM cache.
* **DCD** is 1 when the TOC copy is already dirty:
  * on a hit, it is the line's TIC dirty bit;
  * on a Predicted-Dirty install, it is 1, because the TOC was just marked
    dirty.
* **Exception:** the sampled slot always gets DCD = 0 until the line has
  been written. Otherwise its first write would skip the TOC and the
  written-to bit, which feeds the write predictor, would never be set.

When an install replaces a valid line, `evict_valid` pulses with the
replaced line's address. The last-level cache uses this to clear the DCP and
DCD bits of a copy it may still hold. Without this, a stale DCP+DCD pair
would let a later writeback overwrite a set that now holds another line.

## Interface and timing of the top

| Group | Signals |
|---|---|
| Request (from the last-level cache) | `req_valid/req_ready`, `req_is_wb`, `req_laddr[31:0]`, `req_pc[47:0]`, `req_core`, `req_data[511:0]`, `req_dcp`, `req_dcd`. |
| Response | `rsp_valid` pulses once per read with `rsp_data`, `rsp_dcp`, `rsp_dcd`, `rsp_l4_hit`. `done` pulses when a request (read or writeback) is complete. |
| Channel | `ch_cmd_valid/ch_cmd_ready/ch_cmd`. `ch_cmd` is `{dev, write, addr, data, side}`, and `dev` is one of `DEV_CACHE`, `DEV_META`, `DEV_XP`. |
| Channel responses | `ch_rsp_valid/ch_rsp`. Writes are posted. Each read is answered by exactly one response beat tagged with its device. At most one read per device is outstanding. Responses may arrive in any order. |
| Events | `evict_valid/evict_laddr` (see above), and `evt`: one-cycle pulses per mechanism (TIC/TOC path, hit, miss, misprediction, metadata-cache hit/miss/writeback, DCD skip, TOC dirty update, PDM saving, PDM/clean/writeback install, bypass, victim probe, victim writeback, SWP training), for performance counters. |

The blocks themselves:

* **Hit/miss predictor:** combinational prediction; training takes effect
  at the next clock edge.
* **Metadata cache:** one-cycle synchronous lookup.
* **Write predictor:** combinational prediction; training takes effect at
  the next clock edge.
* **Bypass:** combinational decision; its LFSR steps once per decision.

Reset is asynchronous and active low:

* Reset clears the predictor counters, the metadata-cache valid and dirty
  bits, and the FSM.
* The memories behind the controller start empty: DRAM-cache lines and
  metadata lines read as zero, which means invalid.

## Simulating

The testbenches need only verilator 5. From the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tictoc_full \
    rtl/tictoc_pkg.sv rtl/hit_miss_predictor.sv rtl/write_predictor.sv \
    rtl/metadata_cache.sv rtl/write_aware_bypass.sv rtl/tictoc_top.sv \
    tb/hybrid_mem_model.sv tb/tb_tictoc_full.sv
./obj_dir/Vtb_tictoc_full
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`:

* `tb_hit_miss_predictor`, `tb_write_predictor`, `tb_metadata_cache`,
  `tb_write_aware_bypass`: each block against a reference model in the
  testbench. The bypass test also measures the installed fraction of
  clean read misses: 10.3% over 24,000 decisions.
* `tb_tictoc_top`: about 25 directed requests. Each one checks:
  * the returned data;
  * DCP and DCD;
  * the hit flag;
  * the exact number of channel accesses, as listed above.

  It also checks:
  * the latency of the parallel metadata/memory read;
  * the write-back of a modified metadata-cache entry;
  * the eviction notice;
  * the write predictor learning from a sampled eviction.

  It installs every miss (`INSTALL_PER_MILLE = 1000`) so each step has one
  outcome.
* `tb_tictoc_full`: the whole design at its default sizes, with no parameter
  overrides.
  * The testbench plays the last-level cache. It runs 20,000 random
    reads and writebacks from "writer" and "reader" PCs over addresses
    chosen to collide in the DRAM cache and in the metadata cache.
  * It checks every read against a reference memory.
  * At the end it checks that the TIC and TOC copies agree for every set
    it touched. Predicted-Dirty (TOC dirty, TIC clean) is allowed;
    TIC dirty with TOC clean is not.
  * Each of the 18 mechanisms must occur at least once.
  * It runs in a few seconds.

* `tb_tictoc_stream`: two streaming programs at the default sizes.
  * **Write-once stream:** each line is read, then written back once. It
    sweeps 2,048 sets x 6 tags, and each pass evicts the previous one.
  * **Read-only stream:** another PC reads a different window the same way.
  * After a two-pass warm-up, the checks are:
    * the write predictor has learned the writing PC;
    * at least 90% of its misses are installed Predicted-Dirty;
    * at least 90% of its writebacks cost a single access.
  * The read-only stream must bypass 85-95% of its misses and get no
    Predicted-Dirty installs.
  * Measured results:
    * write stream: 100% Predicted-Dirty installs, 1.00 access per
      writeback. A read costs 4.00 accesses: victim probe, memory read,
      victim write and install, because every victim is dirty.
    * read stream: 89.3% bypassed, 1.10 accesses per read.
  * Finally, the first pass is read back from 3D-XPoint and checked.

`tb/hybrid_mem_model.sv` is the channel model the top-level tests use.

* It is behavioural, not synthesizable.
* Every command holds the bus for 4 cycles.
* DRAM reads return after 13 cycles and 3D-XPoint reads after 78. This
  keeps the roughly 6x latency ratio between the two; the absolute
  numbers are scaled down.
* Its storage is sparse: 3D-XPoint lines hold an address-derived pattern
  until written.
* It counts reads and writes per device.

## Departures and own choices

The following are not fixed by the published description. They are this
design's choices:

* **One request in flight.** No queues or request scheduling are given,
  so the controller is blocking. Overlap comes only from issuing the
  3D-XPoint read in parallel with a metadata fetch. DDR timing and command
  scheduling belong to the channel controller, which is not built here.
* **Hit/miss predictor internals.** Only "a PC-based predictor of about
  1KB" is specified. This design uses 8 cores x 256 counters of 3 bits =
  768 bytes:
  * index: XOR-fold of the PC;
  * counts up on a miss and down on a hit;
  * predicts miss when the top bit is set.
* **Write-predictor signature width.** Two widths appear for the
  signature: a 10-bit `PC mod 1024` and a 9-bit tag for 512 counters.
  The 9-bit form is used. The signature indexes the 512 counters directly,
  and together with the written-to bit it gives the 10 extra bits per
  sampled line. A third bit (`sig_valid`) was added for lines installed
  by writebacks.
* **Sampling.** The target is about 1% of lines. Here one slot per
  metadata line is sampled, which is 1.6%.
* **Tag width.** 64GB / 4GB needs only 4 tag bits. The 6-bit tag of the
  one-byte format is kept, so addresses up to 256GB work.
* **Metadata region.** The metadata region is 1.5% of DRAM capacity. Here
  it is modelled as a separate device address space (`DEV_META`), and all
  2^26 sets hold data. A real part would map the region into the same
  DRAM; that mapping is left to the channel controller.
* **Metadata-cache organisation.** Direct-mapped and write-back. How a
  metadata change reaches DRAM is not specified beyond "read, then write"
  of the metadata line.
* **Random source for the bypass.** A 16-bit LFSR.
* **Eviction notice.** `evict_valid` keeps the last-level cache's DCP and
  DCD bits correct. It is needed by any design that keeps a presence bit
  in the last-level cache, but it is not described.
* **What is not here:**
  * the DRAM and 3D-XPoint devices;
  * the channel PHY and scheduler;
  * the ECC code;
  * the last-level cache that stores the DCP and DCD bits;
  * the cores.

  The controller's ports are where those parts connect.

## Size

Synthesized at default parameters, the controller holds about:

* 12k flip-flop bits, most of them the request registers and the 512-bit
  line buffers;
* 273k bits of memory arrays: the 32KB metadata cache with its tags and
  sampling records, plus the two predictor tables.

The SRAM total in the design intent is 32KB for the metadata cache and
about 1KB each for the two predictors, plus two bits per last-level-cache
line (DCP and DCD), which sit outside this controller.
