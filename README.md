# REAP cache: an STT-MRAM L2 cache that checks every line it reads

## The problem

Reading an STT-MRAM cell means driving a current through its magnetic tunnel
junction. That current flows in the same direction as one of the two write
currents, so now and then a read flips the cell it reads. With the usual
arrangement, where the read current pushes towards '0', a stored '1' can
become '0'. A '0' never changes. This is *read disturbance*. Caches guard
against it with a per-line ECC, typically one that corrects a single error.

A fast set-associative cache does not wait for the tag comparison before it
reads data. It reads all k lines of the addressed set at once, compares the
tags in parallel, and then a k:1 multiplexer picks the hit line. In the
conventional organisation the single ECC decoder sits *after* that
multiplexer. So only the requested line is checked. The other k-1 lines were
read, and could be disturbed, but nobody looked at them. Call these *concealed
reads*. A line may be read this way hundreds or thousands of times before it
is requested. The flips of all those reads add up in it, and once two of them
land in the same line a single-error-correcting code can no longer repair it.

A short calculation shows how fast this grows. Take a line with n cells that
hold '1', and let p be the probability that one read flips one of them. One
checked read fails only if two or more of those cells flip. After N unchecked
reads the line is effectively N·n trials with the same one-error budget. For
n = 100, p = 1e-8 and N = 50 the failure probability rises from about 5e-13
to about 1.3e-9.

## The idea

Swap the ECC decoder and the way multiplexer, and give every way its own
decoder. An 8-way cache therefore has 8 decoders. All k lines read by a
lookup are decoded while the tags are being compared, and the multiplexer
then selects among lines that are already corrected. The access time does not
grow, because decoding overlaps the tag comparison instead of following the
multiplexer.

Checking alone only repairs the copy on its way out. The flipped cell in the
array stays flipped. So in this RTL, every valid line in which a decoder
corrected an error is also written back, corrected, in the same cycle. A line
then never carries the flips of more than one read. Its failure probability
per read is the single-read one, and the one-error budget is never used up by
history. This write-back is what the scheme needs to deliver its reliability
claim. It is a design decision of this implementation, not a mechanism
described in detail by the original proposal.

## Organisation

```
 req.addr = | tag (15) | index (11) | offset (6, unused) |
                          |
          +---------------+-----------------------+
          v                                       v
     tag_array (k tags, valid, dirty)        data_array (k x 523-bit codewords)
          |  k tags                               |  k codewords
          v                                       v
   k x tag_comparator                      k x ecc_decoder  --- corrected codewords ---+
          |  k match bits                         |  k corrected lines, ce/ue flags    |
          v                                       v                                    |
     way_selector  ---- one-hot sel ---->     way_mux (k:1)  --> resp.rdata            |
          |                                                                            |
          +--> cache_ctrl: hit/miss, victim, write-back of corrected lines ------------+
                                              (data_array write: per-way mask)
```

| Module | Role |
|---|---|
| `reap_pkg` | geometry, code layout, request/response structs, controller states |
| `tag_array` | tag memory plus valid/dirty flip-flops, parallel read of one set |
| `data_array` | the STT-MRAM line store, parallel read of one set, per-way write mask, read-disturbance model input |
| `tag_comparator` | one per way: valid and tag equal |
| `way_selector` | match bits to hit, one-hot select and way number |
| `ecc_decoder` | one per way: SEC-DED decode, corrected data and corrected codeword |
| `way_mux` | k:1 one-hot multiplexer after the decoders |
| `ecc_encoder` | one, on the write side, for write data and fill data |
| `cache_ctrl` | the request sequence (below) |
| `reap_cache_top` | wires all of the above together |

Default geometry: 1 MB, 8 ways, 64-byte lines, write-back, giving 2048 sets.
The address is 32 bits: a 15-bit tag, an 11-bit index and a 6-bit offset.
Requests, fills and write-backs move whole 64-byte lines, so the offset bits are
ignored. `SETS` and `WAYS` are parameters of `reap_cache_top`. The line width and
the code are fixed by `reap_pkg`.

## The lookup cycle

This is where the scheme lives, so it is worth following one request.

1. **IDLE, acceptance edge.** `req_ready` is high. When `req_valid` is high the
   request is latched. The index goes to both arrays, which capture all k tags,
   valid/dirty bits and codewords of the set at that clock edge.
2. **LOOKUP, the next cycle, all combinational:**
   * k comparators compare the stored tags with the latched tag. The way
     selector produces `hit` and a one-hot select.
   * At the same time, k decoders check the k codewords. Each gives corrected
     data, a corrected codeword and `ce`/`ue` flags.
   * The multiplexer picks the corrected data of the hit way. A read hit is
     answered in this cycle: `resp_valid` comes exactly one cycle after
     acceptance, with `resp.ce`/`resp.ue` of the requested line.
   * The controller forms `scrub_mask = ce & valid`. The data array writes the
     corrected codeword of each of those ways at the end of the cycle. On a
     write hit the hit way is taken out of the scrub mask and receives the
     encoded new line instead. The dirty bit is set through the tag array.
     All of this is one array write with a per-way mask, so correcting costs
     no extra cycle.
3. On a hit the controller returns to IDLE. A new request can be accepted in
   the following cycle, so hits take two cycles each.

Errors a decoder cannot correct (`ue`) in concealed lines are reported on
`stat_ue_mask` and left in place. There is nothing to repair them with.

## Misses

One request is in flight at a time. On a miss the victim is the first invalid
way, or else the way named by a round-robin counter shared by all sets.

* Dirty victim: **WB** sends `{victim tag, index}` with the victim's
  *corrected* data to the next level and waits for `mem_req_ready`.
* Write miss: **FILL_REQ** writes the new line into the victim way, marks it
  valid and dirty, and returns to IDLE. No fill is needed, since requests
  cover whole lines.
* Read miss: **FILL_REQ** sends the fill request. **FILL_WAIT** waits for
  `mem_resp_valid`, encodes and stores the line with a clean tag, and answers
  the read from the fill data in that same cycle.

The miss path, the replacement policy and write allocation are ordinary
choices made for this implementation. The scheme does not depend on them.

## ECC code

An extended Hamming code protects 512 data bits with 10 check bits plus an
overall parity bit. That makes a 523-bit codeword, stored as
`{parity, check[9:0], data[511:0]}`. Check bit j sits at Hamming position 2^j.
Data bit i sits at the i-th position that is not a power of two, starting at 3.
`reap_pkg::DATA_POS` computes that table at elaboration. Check bit j is the
parity of all data bits whose position has bit j set. The overall parity makes
the codeword even.

Decoding uses the syndrome s (the XOR of the positions of all set bits,
check bits included) and the overall parity:

| parity | syndrome | result |
|---|---|---|
| even | 0 | clean |
| odd | 0 | parity bit flipped, corrected |
| odd | power of two / data position | that bit flipped, corrected |
| odd | beyond position 522 | uncorrectable |
| even | non-zero | double error, uncorrectable |

Read disturbance only produces 1->0 flips. The code does not use that fact,
and corrects a flip in either direction.

## Interface

All ports are plain signals or packed structs from `reap_pkg`. Everything is
synchronous to `clk`. `rst_n` is an asynchronous, active-low reset.

| Port | Dir | Meaning |
|---|---|---|
| `req_valid`, `req_ready`, `req` {write, addr[31:0], wdata[511:0]} | in/out/in | line read or line write from the level above; accepted when both valid and ready |
| `resp_valid`, `resp` {rdata[511:0], ce, ue} | out | read answer, one cycle wide; writes get no answer |
| `mem_req_valid`, `mem_req_ready`, `mem_req` {write, addr, wdata} | out/in/out | fill (write=0) or write-back (write=1) to the next level; held until ready |
| `mem_resp_valid`, `mem_resp_rdata` | in | fill data, one cycle, only while a fill is outstanding |
| `dist_en`, `dist_way`, `dist_bit` | in | read-disturbance model: during a read of a set, clear one bit of one of its ways; tie to 0 in use |
| `stat_valid`, `stat_hit`, `stat_miss`, `stat_ce_mask`, `stat_ue_mask`, `stat_scrub_mask`, `stat_writeback` | out | per-lookup event outputs: hit/miss, which valid ways were corrected or uncorrectable, which were written back, dirty write-back accepted |

The read-disturbance input exists only so that tests can reproduce the error
mechanism. A flip applied during a read lands in the array after the value has
been sensed, so the next access to that set sees it. A real STT-MRAM macro has
no such port.

Assertions (checked when simulating with `--assert`):
* at most one way matches in a lookup;
* a memory request stays up until it is accepted;
* fill data arrives only while a fill is outstanding.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it shows |
|---|---|
| `tb_ecc_encoder` | codewords equal a Hamming encoder written independently in the testbench |
| `tb_ecc_decoder` | clean, every single-bit position, 1->0 flips, and double errors |
| `tb_tag_array`, `tb_data_array` | parallel reads against a model; reset clears valid/dirty; read-disturbance clears the bit after the read |
| `tb_tag_comparator`, `tb_way_selector`, `tb_way_mux` | exhaustive or random checks of the combinational parts |
| `tb_cache_ctrl` | the control sequence of read/write hits, clean and dirty misses, held memory requests, round-robin replacement |
| `tb_reap_cache_top` | the whole cache at full size (see below) |
| `tb_concealed_reads` | one line read 10,000 times while every read disturbs its set: the seven other lines each take 10,000 concealed reads and about 1,250 flips, and all must still read back correctly |

`tb_reap_cache_top` runs the full 1 MB configuration, with no parameter
overrides, for 3000 random line reads and writes. They are aimed at four sets
with twelve tags each, which forces evictions. A memory model behind the
cache stalls randomly. Three accesses in four inject a read-disturbance flip
into a random way of the set being read. Every read is compared with a
reference model, and so is every write-back. A read hit must be answered one
cycle after acceptance. No valid line may ever show an uncorrectable error.
The test also fails if any mechanism never occurred: read/write hit and miss,
dirty write-back, held memory request, correction of the requested line,
correction of a concealed line, and write-back of corrected lines. A typical
run sees about 950 concealed-line corrections and zero uncorrectable errors.

As a cross-check, the same test was run with the corrected-error flags cut off
from the controller. Corrected lines are then no longer written back, which
is the conventional behaviour as far as the array is concerned. That run
produced about 1800 lookups with uncorrectable errors and 500 failed checks:
the accumulation the scheme is meant to remove. `tb_concealed_reads` shows
the same more sharply. With the write-back of corrected lines it sees about
6,000 corrections in concealed lines and no uncorrectable error. Without it,
every one of the 10,000 hot reads reports an uncorrectable error in the set.

Running a testbench with plain Verilator (from the directory holding `rtl/`
and `tb/`):

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    --top-module tb_reap_cache_top rtl/reap_pkg.sv tb/tb_reap_cache_top.sv -o sim
./obj_dir/sim
```

Replace the testbench name for the others. The full-size top test builds in a
few seconds and runs in well under a second.

## Where this departs from, or adds to, the proposal

* **Write-back of corrected lines** (see *The idea*). Without it the per-way
  decoders would only keep bad data from being returned. Flips would still
  accumulate in the array.
* **SEC-DED instead of plain SEC.** The proposal assumes a code that corrects
  one error per line. The extra parity bit adds detection of double errors,
  which this design reports as `ue`.
* **Controller, replacement, write allocation, line-granular interfaces,
  32-bit address.** None of these are specified. They are the simplest
  choices that make a working write-back cache.
* **One-cycle lookup.** Tag compare, k decodes and the multiplexer are placed
  in one cycle after the array read. In a real implementation the 523-bit
  decoders are deep XOR trees and would likely be pipelined. Because the
  decoders overlap the tag comparison, this does not change the relative
  timing argument.
* **Not modelled:** the STT-MRAM cell, sense amplifiers and the read-current
  physics. Only their logical effect, a 1->0 flip during a read, is available
  through `dist_*`. The L1 caches, the processor and main memory are outside
  the design.
* **Evaluation workloads.** The reliability, energy and area results come
  from full-system simulation of SPEC CPU2006 and cannot be reproduced from
  RTL. The RTL implements the evaluated L2 configuration exactly. Any address
  stream runs on it.

## Synthesis notes

`data_array` is written as one 2048 x 4184-bit memory, 8 ways of 523 bits per
row, with a per-way write mask. `tag_array` stores tags in a memory and keeps
valid/dirty in resettable flip-flops. For a real chip the data array maps onto
an STT-MRAM macro with a per-way write mask. The `dist_*` inputs are then tied
off. `rst_n` is asynchronous and active low. The tag and data memories are
not reset: a line is only used once its valid bit is set.
