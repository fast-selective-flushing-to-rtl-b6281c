# FaSe: selective flushing of the L1 data cache against Prime+Probe

Contention-based cache timing attacks such as Prime+Probe work because a
process can fill the L1 data cache with its own lines, let another process
run, and then time its own loads: every line the other process needed has
evicted one of the spy's lines, and that load is slow. The classic software
defence flushes the whole private cache at every context switch, which makes
every following access a miss and costs a full walk of the cache with a
write-back of every dirty line.

FaSe (fast selective flushing) keeps the security effect of that flush while
flushing much less. It rests on two observations:

* **Line level selective flush (LLSF).** After a switch, the next process
  must not find any of its *own* old lines still in the cache. Lines that the
  outgoing process itself brought in or touched during its time slice can
  never give the next process a hit on its data, so they can stay. Only valid
  lines that were *not* accessed during the slice have to go.
* **Cache level selective flush (CLSF).** Software marks the code that handles
  secrets (an AES key schedule, say) as a critical segment. If no critical
  access brought anything into the cache since the last flush, the whole
  flush is skipped. This protects the marked code, not the whole program.

The hardware cost is one extra state bit per cache line, one flag bit, one
1-bit CSR and a small flush state machine. This repository gives RTL for all
of FaSe's hardware and for a simple write-back L1 data cache that hosts it.

## Hierarchy

```
fase_tile                  core-side extension + FaSe data cache
├── fase_core_ext          csr.scf and the scflush instruction
└── fase_dcache            32 KiB, 8-way, 64 B/line write-back L1 D-cache
    ├── fase_tag_array     tag | coherence | FaSe bit per line, 512 lines
    ├── fase_data_array    512 x 64-byte lines
    └── fase_control       FaSe bits, CLSF flag, the flush walk
        └── fase_llsf_decision   per-line flush decision
fase_pkg                   shared constants, coherence enum, flush mode
```

The processor pipeline and the memory system are not part of the RTL. The
tile has three channels instead: an instruction channel through which the
pipeline hands over the CSR instructions for `csr.scf` and `scflush`, the
ordinary load/store channel, and a line-wide memory channel.

## The state FaSe adds

Each tag-array entry is `tag[19:0] | coherence[1:0] | fase`. With 32-bit
physical addresses, 64 sets and 64-byte lines the tag is 20 bits. Coherence
uses the MESI-like encoding `11` M, `10` E, `01` S, `00` I.

| State | Set when | Cleared when |
|---|---|---|
| FaSe bit (one per line) | any core load or store hits the line, or the refill for a core access brings it in | `scflush` visits the line, or a CLSF-nullified `scflush` clears all |
| CLSF flag (one per cache) | an access changes a line's coherence bits (refill, or store upgrade to M) while `csr.scf` = 1 | at the end of every `scflush` |
| `csr.scf` (one per core) | software, `csrwi scf, 1` | software, `csrwi scf, 0` |

So the FaSe bit means "used in the current time slice" and the flag means
"critical data entered or changed state in the cache during this slice". A
critical load that *hits* does not set the flag: it changes no coherence
bits.

## What `scflush` does

`scflush` is issued by the kernel at each flush point (context switch,
syscall entry/exit). It stalls the core until the data cache reports done.
Bit 0 of its `rs1` operand picks the mode: 0 = LLSF only, 1 = CLSF.

**LLSF walk.** A counter visits every line, `line = {set, way}`, 0 to 511.
For each line, `fase_control`:

1. reads the line's coherence and FaSe bits from the tag array (1 clock);
2. looks up the decision table below;
3. clears the line's FaSe bit, whatever the decision;
4. flushes the line or leaves it. A clean line (E or S) is flushed by
   invalidating it in the same clock. A dirty line (M) is first written back
   through the cache's ordinary victim write-back path, then invalidated;
5. advances the counter, and after line 511 finishes.

| Coherence | FaSe | Flush? |
|---|---|---|
| M (11) | 1 | no, kept |
| M (11) | 0 | yes, write back and invalidate |
| E (10) | 1 | no, kept |
| E (10) | 0 | yes, invalidate |
| S (01) | 1 | no, kept |
| S (01) | 0 | yes, invalidate |
| I (00) | 1 | no |
| I (00) | 0 | no |

**CLSF.** In CLSF mode the flag is examined first. Flag = 1: the LLSF walk
runs as above. Flag = 0: the flush is *nullified*. No line is touched except
that all FaSe bits are cleared, one set (8 lines) per clock, so the next
slice starts with clean FaSe state. Either way the flag is cleared at the
end.

**Cost.** Counted from the clock after the cache takes the request until
`flush_done`:

* LLSF: 2 + 2·512 clocks, plus the time of each write-back;
* CLSF nullified: 2 + 64 clocks.

This has the shape of the cost model that motivates the design: a per-line
walk cost plus a much larger per-dirty-line cost. LLSF shrinks the second
term, and CLSF removes both. Here the walk always visits every line, so LLSF
saves only write-backs and the misses that come after the flush, not walk
time.

**Why it still stops Prime+Probe.** Picture a spy that primes every line and
then gives up the core. At that switch the spy's lines all have their FaSe
bit set, so they survive, and the walk clears the bits. The victim then
evicts some spy lines, and the lines it brings in get FaSe = 1. At the switch
back, every line the spy still has in the cache has FaSe = 0 and is flushed.
The victim's lines are kept, but they belong to the victim. So every probe
the spy makes misses, just as after a full flush. The end-to-end testbench
runs exactly this scenario.

## The baseline cache

The FaSe additions need a host cache. `fase_dcache` is a deliberately plain
one, and it is this design's own:

* blocking: it accepts one request at a time (`req_valid`/`req_ready`), and
  `resp_valid` pulses once per request. A hit responds 3 clocks after it is
  accepted. A clean miss takes 6 clocks plus the memory latency;
* a miss picks an invalid way if one exists, else a pseudo-random way (16-bit
  LFSR). A dirty victim is written back, the line is refilled as a whole, and
  the request is replayed;
* a load refill enters E, or S when memory marks its answer "shared". A store
  refill enters E, and the replayed store moves the line to M. A store hit on
  E or S moves the line to M on the spot, because this single-core model has
  no probes and no upgrade transaction;
* the memory channel moves one 64-byte line per request: `mem_req_*` is a
  valid/ready request that reads or writes a line, and `mem_resp_valid`
  answers each request once;
* after reset the tag array spends 64 clocks writing every line to I
  (`ready` goes high when it is done). The data array has no reset;
* requests are not accepted while a flush runs.

Both arrays read synchronously, like SRAMs. The FaSe bit has its own write
port with a way mask. This lets FaSe control set or clear FaSe bits without
rewriting tags, and it is what lets a nullified flush clear a whole set in
one clock.

## Software interface

| Item | Encoding in this RTL |
|---|---|
| `csr.scf` | CSR 0x800 (user custom read/write). All six Zicsr forms work on bit 0. It reads back zero-extended |
| `scflush` | `{12'hFC4, rs1, 3'b000, 5'b00000, 7'b1110011}` (SYSTEM opcode). `rs1` bit 0: 0 = LLSF, 1 = CLSF |

A critical segment is bracketed by `csrwi scf, 1` and `csrwi scf, 0`. On a
trap, the kernel saves `csr.scf` with the process context, clears it, and
restores it on return. This takes a few instructions and needs no extra
hardware.

## Where this RTL departs from, or fills in, the source design

* **Which flag value nullifies a CLSF flush.** The description has two
  readings: one prose step says a set flag nullifies the flush, while the
  flowchart and the rationale nullify when the flag is *clear*. This RTL
  follows the flowchart: a flush is skipped only when no critical data came
  in.
* **How the mode is chosen.** The source runs experiments with LLSF alone and
  with CLSF, but does not say how the hardware tells them apart. Here it is
  an operand of `scflush`.
* **Encodings.** The CSR number and the `scflush` encoding are this design's
  own.
* **Geometry.** The default is the evaluated cache: 32 KiB, 8 ways, 64-byte
  lines, so 64 sets and 512 FaSe bits. A 4-way, 64-set example with 256 bits
  also appears in the description; it can be had with `WAYS = 4`.
* **FaSe bit on every access.** The bit is set on every core access,
  including load hits that change no coherence bits. This follows the bit's
  stated meaning, "accessed in this time slice". The CLSF flag, by contrast,
  follows its own rule literally: it reacts only to coherence changes.
* **Not covered.** The host cache is simplified as described above. It has
  no coherence probes, no MSHRs, no TLB and no interaction with an L2. The
  original work modifies the Rocket Chip data cache, whose internals
  (pipelining, replay, TileLink) are not reproduced. Privilege checks on
  `scflush` are not modelled.
* **Event outputs.** `evt_line_flush`, `evt_line_wb`, `evt_line_nullify` and
  `evt_clsf_nullify` are extra observation strobes, handy for performance
  counters.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fase_llsf_decision` | all eight rows of the decision table, and the write-back output |
| `tb_fase_tag_array` | reset initialisation (64 clocks, all I), random metadata and masked FaSe writes against a reference copy |
| `tb_fase_data_array` | full-line and byte-masked writes of all 512 lines |
| `tb_fase_control` | FaSe bit and flag rules; LLSF over random line states: final state per line, write-back set, exact clock count; CLSF nullify (state and 2 + 64 clocks); CLSF with the flag set behaves as LLSF |
| `tb_fase_core_ext` | all CSR forms, other CSRs ignored, the `scflush` stall and mode, CSR ops held off during a flush |
| `tb_fase_dcache` | 3000 random loads and stores with evictions against a reference memory; hit and miss latency; which lines an LLSF flush keeps, flushes and writes back; CLSF nullify; flag set by critical refills and S→M upgrades but not by critical load hits |
| `tb_fase_tile` | Prime+Probe at full size, in four runs: no flush (the probe finds exactly the victim's 3 sets), LLSF (all 512 probes miss, 509 lines flushed, 3 kept), CLSF with a critical victim (all miss), CLSF with a non-critical victim (flush skipped, the sets leak as expected). It counts every mechanism |

Two more testbenches run workload shapes from the original evaluation on the
full-size tile:

* `tb_fase_latctx` is a context-switch benchmark in the style of `lat_ctx`.
  P processes take turns summing arrays of 0 to 64 KiB, and every switch runs
  an LLSF flush. It checks temporal isolation: after each switch, every first
  touch by the incoming process misses. It checks how many lines each flush
  keeps. With two processes of 16 KiB, each flush keeps exactly half of the
  cache. It prints lines flushed against lines valid per switch. The flush
  time per switch stays at 1026 clocks, because the walk is fixed and these
  processes write nothing back. The saving shows in the lines kept, which
  the next process does not have to fetch again.
* `tb_fase_aes_clsf` is an AES-like file encryption with a syscall between
  chunks. It compares no flush, LLSF, and CLSF with two sizes of critical
  segment: key setup plus the encrypt calls, or key setup plus the whole
  encryption loop. After the first chunk the tables stay resident, and a
  critical hit changes no coherence bits, so most CLSF flushes are skipped.
  The wider segment also covers the output buffer, which brings in new lines
  on every chunk, so it skips fewer flushes and costs more.

`tb/fase_mem_model.sv` is the behavioural memory the cache testbenches use.
Its latency is 6 clocks. A line never written reads as a pattern made from
its address.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/fase_pkg.sv rtl/*.sv tb/fase_mem_model.sv tb/tb_fase_tile.sv \
    --top-module tb_fase_tile
./obj_dir/Vtb_fase_tile
```

All testbenches run at the default sizes, and each finishes in well under a
second.

## Changing it

`SETS` and `WAYS` are parameters of `fase_tile`, `fase_dcache`,
`fase_control` and the two arrays. The tag width follows from `SETS`, the
line size and `PADDR_BITS`. Line size, word size and address width are
constants in `fase_pkg`, as are the CSR number and the `scflush` encoding.
The per-line decision lives in `fase_llsf_decision` alone. The cycle formulas
above assume the 2-clock-per-line walk in `fase_control`. That walk could
read a whole set at once and decide for all ways in parallel; that would
change the walk time, not the outcome.
