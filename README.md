# Xcorr scoring accelerator with a spectrum cache, peptide pre-fetch and a shared-bus FCFS arbiter

Database search in mass-spectrometry proteomics scores every measured
(experimental) tandem spectrum against every peptide in a database whose
mass lies within a window around the spectrum's precursor mass. The score
used here is the cross-correlation score Xcorr. Once the experimental
spectrum has been preprocessed, Xcorr is simply a dot product between that
spectrum and the theoretical spectrum of the peptide, meaning the fragment
ions the peptide would produce. The arithmetic is trivial. The cost is in
moving data: every candidate needs its peptide read from DRAM, and a naive
design re-reads the experimental spectrum for every candidate.

This RTL implements an accelerator built to avoid that traffic:

* **Each processing element (PE) scores one spectrum at a time.** It copies
  the spectrum into a 2 kB on-chip cache once and then scores every
  candidate against the cached copy.
* **The peptide database is sorted by mass.** The candidates of a spectrum
  are found by a single binary search, then fetched one after another ahead
  of use (pre-fetch) into a small FIFO.
* **Every DRAM read is broadcast to all PEs with its address.** A PE that is
  waiting to fetch the same peptide record takes the broadcast copy instead
  of reading DRAM again.
* **Sixteen PEs share one memory bus** through a first-come first-serve
  (FCFS) arbiter. The PE that has waited longest wins.

Each peptide is scored by an ion-matching kernel. The kernel compares one
theoretical ion per clock against a 512-bit packet of 16 experimental peaks.

The default configuration is 16 PEs, a 2 kB spectrum cache per PE and
512-bit memory words. It is synthesizable SystemVerilog-2017 and has been
simulated end to end with Verilator at that configuration.

## System organisation

```
            CSR port                       512-bit memory port (Avalon-MM style)
               |                                      ^
          core_regs --cfg/start--+                    |
               ^                 |           fcfs_bus_arbiter ---- find_max
               | pe_done         v                 ^  ^   ^
               +----------- PE0  PE1 ... PE15 -----+--+---+ (bus_request/grant,
                             ^    ^        ^                 commands, responses)
                             +----+--------+---- peptide_bcast_bus (every read
                                                   returned, with its address)
```

Inside one PE (`processing_element`):

```
  bus_port_mux --- pe_controller ----------------------------+
       |   \             | start/prec_mass/tolerance         | fill / refill
       |    \            v                                   v
       |     binary_search --> sync_fifo --> ion_generator --> ion_matching_kernel
       |      (search, pre-fetch,  (peptide     (b/y ions,        |  ^ packet reads
       |       broadcast snoop)    FIFO)        ascending m/z)    |  |
       |                                                          v  |
       |                                              score  spectrum_cache (2 kB)
       +------------------------- score_ram <---------------+
                                 (drained to DRAM by the controller)
```

Two clients inside a PE share its bus port: the controller, which handles
spectrum loads, refills and score writes, and the binary search, which
handles peptide reads. `bus_port_mux` gives the port to the lower-numbered
client that is requesting and keeps it there until that client drops its
request. The arbiter handles requests from the 16 PEs in the same way.

The host side of the system is not part of this RTL: the host CPU, the PCIe
DMA bridge, the Avalon interconnect and the DRAM controller. The top level
therefore exposes two ports: a small register port (CSR) and one 512-bit
memory master port.

## Data formats in DRAM

All addresses are **512-bit word addresses**, and every record starts on a
word boundary.

**Ion pair.** 32 bits: `{intensity[15:0] (IEEE fp16), mz[15:0]}`. The m/z is
an unsigned bin number with 1 Da bins, so a mass *m* maps to bin
`round(m)`. A **packet** is 16 ion pairs in one word, with lane 0 in bits
[31:0].

**Spectrum record** (at `SPEC_BASE + s*SPEC_STRIDE`):

| word | contents |
|---|---|
| 0 | header: bits [31:0] precursor neutral mass (unsigned Q16.16 Da); bits [40:32] number of packets `npkt`, 1..256 |
| 1..npkt | peaks sorted by ascending m/z, 16 per word; the last word is padded with m/z 0xFFFF, intensity 0 |

The intensities must already be the preprocessed Xcorr vector. Xcorr's
background subtraction, meaning the intensity minus its mean over
neighbouring ±75 bins, is done by whoever writes the spectrum. After that,
the score is a plain dot product.

**Peptide record** (at `PEP_BASE + k`, one word per peptide). The records
are sorted by ascending mass.

| bits | field |
|---|---|
| [31:0] | neutral monoisotopic mass, Q16.16 Da |
| [39:32] | length in residues, 2..50 |
| [289:40] | 50 residue codes, 5 bits each, N-terminal residue first |
| [511:290] | unused |

Residue codes 1..20 are `A C D E F G H I K L M N P Q R S T V W Y`. Code 2
(C) carries carbamidomethylation (+57.02146 Da). The mass table is in
`xcorr_pkg::residue_mass`.

**Result record** (at `SCORE_BASE + s*SCORE_STRIDE`):

| word | contents |
|---|---|
| 0 | summary: bits [31:0] index of the first candidate peptide, bits [63:32] number of candidates |
| 1.. | fp32 scores, 16 per word, candidate *j* in word `1 + j/16`, lane `j%16` |

`SCORE_STRIDE` must be at least `1 + ceil(max_candidates/16)`.

## The ion-matching kernel

This is the arithmetic core (`ion_matching_kernel`). It also holds the one
subtle invariant of the design: **theoretical ions arrive in ascending m/z
and the spectrum is stored in ascending m/z**. The kernel therefore walks
both lists once, like a merge, and never needs to look backwards.

Datapath:

* **Packet registers.** 16 × 32-bit registers hold the current packet.
* **Comparators.** 16 parallel `>=` comparators test each lane's m/z
  against the theoretical ion's m/z.
* **Lane select.** A priority encoder picks the *lowest* lane whose m/z is
  at least the ion's m/z, and a 16:1 multiplexer takes that lane.
* **Match test.** If the selected lane's m/z equals the ion's m/z, the lane
  intensity times the ion intensity is added to the score register. With
  1 Da bins, an ion can match at most one peak.
* **Beyond-packet test.** A 17th comparator tests the ion against the last
  (largest) m/z of the packet. If the ion lies beyond the packet, the ion is
  held and the 8-bit packet counter (the cache read address) counts up. The
  next packet is then read, and the same ion is compared again.
* **End of peptide.** After the peptide's last ion, the score is converted
  and offered on a ready/valid port. The counter returns to packet 0.

**Arithmetic.** Each fp16×fp16 product is formed exactly and added into a
96-bit signed fixed-point accumulator with 48 fraction bits. That width
covers the whole range of fp16 products, from 2^-48 to below 2^32. The sum
is therefore exact and does not depend on the order of addition. It is
converted to fp32 once per peptide, truncating toward zero. Infinities and
NaNs in the input are not supported.

**Timing.**

| event | cycles |
|---|---|
| theoretical ion inside the current packet | 1 (one ion per cycle) |
| move to the next packet | 2 (request, then RAM read) |
| start of a new peptide | 3 (rewind to packet 0 and reload) |
| cache miss | extra: the stall lasts for the controller's refill |

The testbench checks the 3-cycle peptide start: a 12-ion peptide that fits
in packet 0 is accepted in 15 cycles.

## Theoretical spectrum generation

`ion_generator` takes one peptide record from the FIFO and emits its
singly-charged b and y fragment ions, all with intensity 1.0 (fp16
0x3C00):

* b ions are the prefix sums of the residue masses plus one proton.
* y ions are the suffix sums plus water plus one proton.

There are *n*−1 of each for a peptide of *n* residues. Both series rise with
fragment length, so a two-way merge emits the 2(*n*−1) ions in ascending m/z
order at one ion per clock. This order is what the kernel requires. Each
mass is rounded to its 1 Da bin only when it is emitted; the running sums
are kept in Q16.16, so rounding errors do not accumulate.

## Spectrum cache and refill

Each PE has `CACHE_WORDS` = 32 words of 512 bits, which is 2 kB, in
`spectrum_cache`. A spectrum of up to 32 packets (512 peaks) is held whole
and read from DRAM exactly once per spectrum.

A longer spectrum is handled as a sliding window. The cache holds packets
`[base, base+32)`. When the kernel asks for a packet outside the window,
the cache raises `miss` with the packet number and holds the request. The
controller then reloads 32 packets starting at the missed one, sets the
new base, and the held read completes.

Because the kernel walks the spectrum upward for each peptide, a long
spectrum costs refills on every peptide whose ions reach past the window,
plus one more to rewind to packet 0. This is exactly the effect of cache
size on DRAM traffic that the cache-size sweep below is about.

## Candidate search, pre-fetch and the peptide broadcast

`binary_search` runs once per spectrum. It finds the first record with mass
≥ `prec_mass − tolerance`, using one bus read per probe and about
log2 N probes for a database of N records. It then streams the following records into the peptide
FIFO (8 entries deep) for as long as their mass is ≤
`prec_mass + tolerance`. It stops at the first heavier record or at the end
of the database, and reports `first_idx` and `count`.

The pre-fetch runs ahead of the ion generator and is limited only by FIFO
space. The time to fetch one peptide therefore overlaps with scoring the
previous ones.

**The broadcast.** `peptide_bcast_bus` registers every word returned from
DRAM, together with the address that was read, and drives it to all PEs one
cycle later. Suppose a PE is waiting for the bus in order to fetch record
*k*, and a broadcast of address `PEP_BASE + k` goes by. The PE then takes
that data and withdraws its bus request, so no DRAM read is issued.

The broadcast only helps when PEs need the same peptides at around the same
time, meaning their spectra have similar precursor masses. Sorting the
spectra by precursor mass on the host makes this far more likely. With
random precursor masses it rarely happens: the random-order full-size test
sees about 2 broadcast hits per run. With spectra in precursor order, close to
half of all peptide records reach a PE through the broadcast.

## FCFS bus arbitration

`fcfs_bus_arbiter` has one wait-count register per PE:

* While PE *i* requests the bus and is not being served, its count rises by
  one per cycle, saturating at 2^16−1.
* When PE *i* is not requesting, its count is 0.

Whenever the bus is free, `find_max`, a comparator tree of depth log2 N,
picks the largest key `{request, count}`. Ties go to the lowest index. The
winner's count is cleared, its index is registered, and a demultiplexer
drives a one-hot grant.

The grant is held until the owner drops its request. A PE may therefore
issue a whole burst of commands in one session, such as a spectrum load or
a score drain. The next owner can be selected in the same cycle the
previous owner lets go.

The arbiter also steers the owner's command to the memory port and the
memory's response back to the owner. Other PEs see `waitrequest` high.

Assertions check that the grant is one-hot and is given only to a
requesting master.

## Control: core registers and PE controller

The CSR port has 4-bit word addresses and 32-bit data. Reads return one
cycle after `csr_read`, with `csr_readdatavalid`. Writes are ignored while
a run is busy.

| addr | name | access | meaning |
|---|---|---|---|
| 0 | CTRL | W | bit 0 = 1 starts a run |
| 1 | STATUS | R | bit 0 busy, bit 1 done (sticky until the next start) |
| 2 | NUM_SPECTRA | RW | spectra in the run |
| 3 | SPEC_BASE | RW | word address of spectrum 0 |
| 4 | SPEC_STRIDE | RW | words between spectrum records |
| 5 | PEP_BASE | RW | word address of peptide record 0 |
| 6 | NUM_PEPTIDES | RW | records in the database |
| 7 | TOLERANCE | RW | precursor window half-width, Q16.16 Da |
| 8 | SCORE_BASE | RW | word address of result record 0 |
| 9 | SCORE_STRIDE | RW | words between result records |
| 10 | PE_DONE | R | per-PE done flags |
| 11 | CYCLES | R | clock cycles of the last run |

To run: write the layout registers, write CTRL = 1, poll STATUS until done,
then read the results from DRAM.

Spectra are assigned statically: PE *p* scores spectra *p*, *p*+16,
*p*+32, and so on. For each spectrum, `pe_controller` runs these steps:

1. Reads the header and the first min(npkt, 32) packets in one bus session.
2. Starts the binary search.
3. While scoring, serves cache misses with refills, and stores each score
   in the 16-word `score_ram` (256 scores).
4. Whenever the score RAM fills, and after the last candidate, copies it to
   the result record.
5. Writes the summary word.

When all of its spectra are done, the PE raises `pe_done`. The run ends
when every PE is done.

## Timing and measured performance

Two simulations at the default sizes (16 PEs, 2 kB caches). Both use a
memory model with a 4-cycle read latency and random stalls on 10% of
cycles.

**Random order** (`tb_xcorr_top`):

* **Workload:** 48 spectra of 300–1400 peaks, against 6,000 peptides, with a
  ±50 Da window. The spectra's precursor masses are random.
* **Result:** 29,417 dot products in 483,792 cycles, about 16 cycles per dot
  product.
* **Why so slow:** neighbouring PEs almost never need the same peptide at
  the same time, so the broadcast rarely helps. Nearly every candidate
  costs each PE its own DRAM read.

**Precursor order** (`tb_xcorr_tolerance_sweep`):

* **Workload:** 64 spectra of 100–500 peaks, made from consecutive database
  peptides, against 6,000 peptides. This is the order a host gets by
  sorting its spectra by precursor mass.
* **Result:** typical figures from one seed:

| window | dot products | cycles | cycles / dot product | DRAM reads / dot product |
|---|---|---|---|---|
| ±5 Da | 3,912 | 29,137 | 7.5 | 1.09 |
| ±10 Da | 8,999 | 42,202 | 4.7 | 0.67 |
| ±25 Da | 23,086 | 97,183 | 4.2 | 0.59 |
| ±50 Da | 44,680 | 194,768 | 4.4 | 0.60 |

With wider windows, the fixed cost of each spectrum (loading it and running
the binary search) is spread over more candidates. More of the peptide reads
are also shared through the broadcast.

**Cache size and PE count** (`tb_xcorr_design_space`):

* **Workload:** 64 spectra of 250–500 peaks (16–32 packets), against 3,000
  peptides, with a ±10 Da window. This gives 3,852 dot products.
* **Configurations:** seven, run side by side on the same workload.
* **Waiting time:** cycles in which a PE requests the bus while another PE
  holds it, summed over PEs.

| PEs | cache | cycles | DRAM reads | refills | waiting cycles per PE |
|---|---|---|---|---|---|
| 16 | 512 B | 212,530 | 37,882 | 4,081 | 154,905 |
| 16 | 1 kB | 41,645 | 6,008 | 17 | 35,867 |
| 16 | 2 kB | 42,735 | 6,236 | 0 | 36,731 |
| 16 | 4 kB | 42,771 | 6,236 | 0 | 36,759 |
| 1 | 2 kB | 185,832 | 6,237 | 0 | 0 |
| 6 | 2 kB | 45,463 | 6,234 | 0 | 30,264 |
| 31 | 2 kB | 44,568 | 6,234 | 0 | 36,736 |

Below the size of the spectra, the cache thrashes: DRAM traffic and
waiting time jump by about 6×. Once a spectrum fits, a bigger cache changes
nothing. This is the same qualitative behaviour as the published
cache-size study.

Adding PEs stops paying off after about 6 here. The shared bus saturates
because every peptide read holds it for the DRAM latency.

**What limits throughput.** The limit is the shared bus. Each read is a
separate bus session, and the owner keeps the bus through the DRAM latency.
One read therefore occupies the bus for about 7 cycles. At 0.6 reads per dot
product, that comes to about 4 cycles per dot product. This matches the
measurements above.

**Comparison with the published figures.** The published run times imply
about 1.5 cycles per dot product at 200 MHz (162.79 M dot products in
1.25 s with 16 PEs).

**How to close the gap.** Two changes would close most of it, and neither
is published:

* split read transactions in the arbiter, so the bus is released during the
  DRAM latency;
* a wider snoop window in the pre-fetcher.

## Where this design departs from or adds to the published description

* **Cache refill.** The published text has the controller copy the whole
  spectrum into on-chip RAM, and it gives the cache as 2 kB with an 8-bit
  packet counter (up to 256 packets). This design reconciles the two with
  a windowed cache that refills on a miss (see above).
* **Score draining.** Scores are written back whenever the 1 kB score RAM
  fills, not only at the end of a spectrum. Any number of candidates is
  therefore supported.
* **Match rule.** A match requires the lowest lane at or above the ion to
  have *equal* m/z. The published description says only that the matching
  peak is found by the comparators.
* **Count-up signal.** The kernel does not use a separate comparator for
  "count up". It reuses the last lane's `>=` output: when that lane's m/z is
  not at or above the ion, the ion lies beyond the packet.
* **Arithmetic.** Exact fixed-point accumulation with conversion to fp32.
  The number formats of the score are not published.
* **Theoretical spectrum.** Singly-charged b and y ions, unit intensity.
  Flanking peaks, neutral losses and higher charge states are not
  generated.
* **Preprocessing.** The Xcorr preprocessing of the experimental spectrum
  is left to the host.
* **Own layouts and interfaces.** Spectra are statically assigned to PEs.
  The record layouts, the CSR map, the bus handshakes and the broadcast
  protocol (address-tagged, snooped only while waiting for the bus) are all
  this design's own.
* **Throughput.** The published run times imply about 1.5 cycles per dot
  product. This RTL measures about 4 cycles with spectra in precursor order,
  and about 16 with random order. The reason is that a bus owner keeps the
  bus through the DRAM latency of every read (see the timing section).
* **Arbiter grant.** The grant is held for a whole session, and the key is
  `{request, count}`. The published description says only that the
  longest-waiting master wins.

## Source files

| file | role |
|---|---|
| `rtl/xcorr_pkg.sv` | types, record layouts, residue masses, fp16 product and fp32 conversion |
| `rtl/xcorr_top.sv` | top: CSRs, 16 PEs, arbiter, broadcast bus |
| `rtl/core_regs.sv` | register file, start/done, cycle counter |
| `rtl/fcfs_bus_arbiter.sv`, `rtl/find_max.sv` | wait counters, comparator tree, grant and routing |
| `rtl/peptide_bcast_bus.sv` | address-tagged broadcast of returned reads |
| `rtl/processing_element.sv` | one PE |
| `rtl/pe_controller.sv` | spectrum load, refill, score drain, summary |
| `rtl/binary_search.sv` | candidate search, pre-fetch, broadcast snoop |
| `rtl/bus_port_mux.sv` | shares a PE's bus port between controller and search |
| `rtl/sync_fifo.sv` | peptide FIFO |
| `rtl/ion_generator.sv` | b/y ion generation and merge |
| `rtl/spectrum_cache.sv` | windowed 2 kB spectrum RAM |
| `rtl/ion_matching_kernel.sv` | comparators, select, multiply-accumulate |
| `rtl/score_ram.sv` | per-PE score buffer |

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `NUM_PE` | 16 | `xcorr_top` | processing elements, 1 or more (the arbiter scales with it) |
| `CACHE_WORDS` | 32 | `xcorr_top`, PE | spectrum cache words of 64 B (8/16/32/64 = 512 B..4 kB) |
| `SCORE_WORDS` | 16 | `xcorr_top`, PE | score RAM words of 16 scores, minimum 2 |
| `FIFO_DEPTH` | 8 | `xcorr_top`, PE | peptide pre-fetch FIFO entries |
| `WAIT_W` | 16 | `xcorr_top`, arbiter | wait-counter width |
| `LANES`, `BUS_DW` | 16, 512 | `xcorr_pkg` | ion pairs per packet, bus width |
| `MAX_LEN` | 50 | `xcorr_pkg` | longest peptide |

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against a
reference model written independently in `tb/xcorr_ref_pkg.sv`, which
covers ion masses, fp16 decoding and the dot product computed in `real`.
Each testbench has a watchdog and ends by printing
`TB_RESULT checks=N failures=M`.

`tb/dram_model.sv` is a behavioural DRAM with configurable latency and
random stalls. `tb/xcorr_workload_pkg.sv` builds random sorted databases
and spectra and the expected results for each one:

* first candidate index and candidate count;
* every score, within 2^-21 relative error.

| testbench | what it exercises |
|---|---|
| `tb_find_max` | random keys, ties |
| `tb_sync_fifo` | random push/pop, full/empty, flush |
| `tb_score_ram` | lane writes, read latency |
| `tb_peptide_bcast_bus` | address tagging under stalls |
| `tb_fcfs_bus_arbiter` | 16 masters; grant order equals longest wait; routing |
| `tb_spectrum_cache` | hits, misses, window moves |
| `tb_core_regs` | register map, start rules, busy/done, cycle count |
| `tb_ion_generator` | b/y ions and their order for random peptides |
| `tb_ion_matching_kernel` | scores against the reference; the 3-cycle peptide start |
| `tb_binary_search` | search bounds, pre-fetch, broadcast takes |
| `tb_pe_controller`, `tb_processing_element` | one PE with tiny caches and long spectra (hundreds of refills) |
| `tb_xcorr_top` | the whole chip at default parameters, through the CSRs |
| `tb_xcorr_design_space` | 16 PEs with 512 B–4 kB caches and 1/6/31 PEs with 2 kB on one workload; checks results and the cache/bus trends |
| `tb_xcorr_tolerance_sweep` | six runs with ±1.5 to ±50 Da windows, precursor-ordered spectra, restart without reset; prints cycles per dot product |

`tb_xcorr_top` counts each mechanism and fails if any of them never
happens:

* bus contention;
* cache refill;
* score-RAM drain;
* broadcast hit;
* FIFO full;
* kernel packet advance.

It takes about a minute and a half, including compilation.

To simulate with Verilator 5, for example the full chip:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/xcorr_pkg.sv tb/xcorr_ref_pkg.sv tb/xcorr_workload_pkg.sv \
    tb/tb_xcorr_top.sv --top-module tb_xcorr_top
./obj_dir/Vtb_xcorr_top
```

Swap in another testbench and `--top-module` to run a single block.

Verilator's lint of the RTL reports no circuit warnings. What remains is
style-level: the package checked on its own reports constants and function
bits it does not use itself. Verilator also notes that `rst_n` is used both
as the asynchronous reset and in the `disable iff` clause of the search
module's assertions.
