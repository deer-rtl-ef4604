# DEER deep runahead unit: SystemVerilog RTL

Mobile applications execute very large amounts of code, and the same
instruction often comes back only after tens of thousands of other
instructions have run. A level-1 instruction cache cannot hold that much code,
so the front end keeps missing. Branch-predictor-driven prefetching fails as
well, because the branch predictor misses for the same reason.

DEER moves the prediction work offline. A profiler runs the application and
groups its basic blocks into *hyperblocks* (HBs). An HB is a chain of basic
blocks inside one function that usually run in sequence. The profiler links
each HB to its *most likely successor*: it follows calls and returns, and it
steps over loops and recursion. It then writes, for every HB that begins at a
call or return target, one 16-byte metadata entry. That entry names the
instruction cachelines of the whole predicted path that follows, typically
several hundred instructions. The entries form a table in ordinary memory,
and one system register, `HBT_PTR`, points to it.

The hardware side is small. It is the **deep runahead unit (DRU)** in this
repository. When a call or return retires, the DRU reads the metadata entry
of the call/return target and pushes the listed cachelines into a prefetch
queue. It also reads the entry of the address on top of its return address
stack, so that prefetching continues along the expected return path. It keeps
no metadata on chip except the one line in transit. Its storage is a 16-entry
return address stack, a 32-entry prefetch buffer and one 16-byte line
register.

This RTL implements the DRU in its semi-static runahead (SSRA)
configuration, which is the main configuration of the DEER paper (Vahdatniya
et al., "DEER: Deep Runahead for Instruction Prefetching on Modern Mobile
Workloads"). The block structure, sizes and metadata encoding follow that
paper. Where the paper leaves something open, this design makes its own
choice, and the section "Departures and choices" lists each one.

## What the software provides: SSRA metadata

The SSRA entry of hyperblock *H* lists the cachelines of *H* and of every
hyperblock that the offline analysis can chain after it. The analysis works
like a runahead with a private return stack. Calls are followed into the
callee, and loops are skipped. At a return the analysis can only continue if
it saw the matching call, because it does not know who called the starting
function. The chain therefore stops at the first return beyond the starting
function, or after about 50 hyperblocks.

Example: HB1 calls HB2, HB2 calls HB3, HB3 calls HB4, HB4 returns to HB5,
and HB5 returns to HB6. The entry of HB3 lists the cachelines of HB3, HB4 and
HB5. It cannot list HB6, because HB6 is reached only by returning out of the
function that contains HB3. The hardware covers that gap. When HB3 is
entered, the return address HB6 sits on top of the DRU's return address
stack, so the DRU also fetches HB6's entry. This second fetch is the
**RAS-top prefetch**.

Software must use the same hash as the hardware (below) to place entries in
the table.

## The 16-byte metadata entry

An entry is two 64-bit groups. Group 1 is in the low 8 bytes and group 2 in
the high 8 bytes. Each group describes three 512-byte regions of eight
64-byte cachelines:

| bits    | field              | meaning |
|---------|--------------------|---------|
| [63:34] | `base1` (30 bits)  | address of the first region, in 512-byte units, bits [38:9] of the address |
| [33:26] | `bitmap1` (8 bits) | which of the first region's 8 lines to prefetch |
| [25:21] | `delta2` (5 bits)  | second region = first region + `delta2` × 512 B |
| [20:13] | `bitmap2`          | lines of the second region |
| [12:8]  | `delta3` (5 bits)  | third region = first region + `delta3` × 512 B |
| [7:0]   | `bitmap3`          | lines of the third region |

Address bits [47:39], above the 30-bit base, are copied from the hyperblock
PC that the entry was fetched for. One entry can name up to 48 cachelines in
six regions. Regions within one group lie within 16 KB of the group's first
region. The paper's metadata formation keeps at most the last 16 lines of a
chain, which are the farthest ahead. The hardware decodes whatever bits are
set.

Bitmap bit *i* selects line *i* of its region, at byte offset *i* × 64.
`prefetch_on_refill` emits the addresses in region order 1…6, and within a
region from the lowest line up.

Decoding, as done by `prefetch_on_refill`:

```
region[0] = {pc[47:39], grp1.base1, 9'b0}
region[1] = region[0] + grp1.delta2 * 512
region[2] = region[0] + grp1.delta3 * 512
region[3..5] likewise from grp2
line address = region[r] + i * 64   for every set bit i of bitmap r
```

The entry address is `HBT_PTR + 16 * hash(pc)`. The hash is an XOR fold: PC
bits [47:2] are cut into 15-bit slices, and the slices are XORed together. A
15-bit index gives a 512 KB table of 32,768 entries. That is about twice the
hyperblock count of the largest workload in the paper (11,371 HBs, 178 KB of
metadata). Entries carry no tag, so hyperblocks whose indices collide share
an entry.

## From a retired call to prefetches

```
retire ──► call_ret_filter ──push/pop──► ras ──RAS-top PC──┐
                 │ trigger PC                               ▼
                 └────────────────────────────────► runahead_logic
                                                          │ HB PC
                                 HBT_PTR ──► metadata_fetch_unit ◄──► memory
                                                          │ 16-byte line
                                                   prefetch_on_refill
                                                          │ line addresses
                                                   prefetch_buffer ──► L2 (LSU) / L1 (IFU)
```

1. **`call_ret_filter`** looks at retired instructions only, so DEER acts on
   committed control flow and never on a wrong path. A call pushes PC + 4
   onto the RAS. A return pops the RAS. Both produce a trigger whose PC is
   the call/return target. Every such target starts a hyperblock.
2. **`ras`** holds 16 return addresses. A push onto a full stack overwrites
   the oldest entry. A pop of an empty stack is ignored.
3. **`runahead_logic`** turns a trigger into two requests. The first is for
   the trigger PC. The second is for the RAS top, read when that request
   goes out, so it reflects the push or pop of the same instruction. If a
   new trigger arrives before both have gone out, it replaces them. The
   prefetch stream always follows the most recent call or return, and this
   is how DEER corrects itself when execution leaves the predicted path.
4. **`metadata_fetch_unit`** owns `HBT_PTR`. It computes the entry address
   (`md_addr_gen`) and issues a tagged 16-byte read on the normal memory
   path. There is no metadata cache. Up to 64 reads may be in flight. When a
   line returns, it goes into the single fetched-metadata register together
   with PC bits [47:39] of its request. The unit holds off further memory
   responses until `prefetch_on_refill` has consumed that line.
5. **`prefetch_on_refill`** emits one cacheline address per cycle, as
   decoded above.
6. **`prefetch_buffer`** is a 32-entry FIFO. When it is full, new addresses
   are dropped, so older queued prefetches win. Its head goes to the
   load/store unit (prefetch into L2, the default) or to the fetch unit
   (prefetch into L1), as chosen by `PREFETCH_INTO_L2`.

Timing of the top module, `deer_dru`:

- **Retire to metadata read:** a call or return retired in cycle *t* issues
  its trigger-PC read in cycle *t*+2, and its RAS-top read in *t*+3.
- **Read to first prefetch:** with a memory latency of *L* cycles, the first
  prefetch address is offered on `pf_l2_*` *L*+2 cycles after the read
  (402 cycles at the paper's 400-cycle metadata latency).
- **Steady state:** one address per cycle follows the first.

## Interfaces of `deer_dru`

| port group | direction | content |
|---|---|---|
| `retire_valid`, `retire` (`retire_t`) | in | one retired instruction per cycle: `pc`, `target`, `kind` (`BR_OTHER`, `BR_CALL`, `BR_RET`) |
| `hbt_we`, `hbt_wdata`, `hbt_rdata` | in/out | `HBT_PTR` write and read. Software writes it at program load and on context restore, and reads it to save it. Zero turns the DRU off. |
| `mem_req_valid/ready/addr/tag` | out/in | 16-byte metadata reads |
| `mem_resp_valid/ready/tag/data` | in/out | returned lines, any order, identified by tag |
| `pf_l2_valid/ready/addr` | out/in | line addresses (VA[47:6]) for the load/store unit |
| `pf_l1_valid/ready/addr` | out/in | the same for the instruction fetch unit, when `PREFETCH_INTO_L2 = 0` |
| `events` (`dru_events_t`) | out | one-cycle event pulses: triggers, RAS overflow/underflow, requests, replaced requests, refills, pushes, drops, issues |

Reset is asynchronous and active low (`rst_n`). All handshakes are
valid/ready, and a transfer happens on a clock edge where both are high. The
types are in `rtl/deer_pkg.sv`.

## Parameters

| parameter | default | from |
|---|---|---|
| `RAS_DEPTH` | 16 | paper |
| `PB_DEPTH` | 32 | paper |
| `TRIGGER_EN` | 1 | paper (metadata of the trigger PC fetched) |
| `RAS_TOP_EN` | 1 | paper (RAS-top prefetch on) |
| `PREFETCH_INTO_L2` | 1 | paper (prefetch into the unified L2) |
| `HASH_BITS` | 15 | this design (table size not given) |
| `MAX_OUTSTANDING` | 64 | this design (reads in flight not given; sized below) |
| `RET_OFFSET` | 4 | this design (AArch64 call length) |
| address width, line, region | 48 bits, 64 B, 512 B | paper (6-byte entries; 8 lines per 512-byte region) |

`TRIGGER_EN = 0` or `RAS_TOP_EN = 0` keeps only one of the two metadata
requests per call or return, the "RAS-top only" and "trigger only" variants
against which the paper measures what each request contributes. Clearing
both is rejected at elaboration.

The paper counts 304 bytes of on-chip storage: the RAS, the prefetch buffer
and the 16-byte line register. This RTL also keeps 9 PC bits plus two state
bits per outstanding read, 704 bits for 64 reads. It stores prefetch-buffer
entries as 42-bit line addresses instead of 48-bit byte addresses.

## Departures and choices

The paper describes the DRU as a block diagram, two algorithms, the entry
format and a parameter table. Everything below is this design's own choice.

- **Hash.** The paper specifies "a hash of the HB PC" and mentions cuckoo and
  Murmur3 hashing only for the memory footprint. Here it is an untagged XOR
  fold, chosen because a 16-byte entry has no room for a tag.
- **Delta base.** Both region deltas count from the group's first region.
  The paper gives 5-bit deltas and says the regions lie within 16 KB of each
  other, but does not say what a delta is relative to.
- **Bit and byte order.** Bitmap bit *i* selects line *i*. Group 1 is in the
  low 8 bytes.
- **Memory interface.** Tags are used, with up to 64 reads in flight.
  Responses may return in any order. The paper gives no limit. 64 comes
  from its workload figures: about one call per 50 instructions, so about
  one call or return per 25. The 8-wide core runs at an IPC of at most 2,
  and each call or return makes two reads. That is up to 0.16 reads per
  cycle, or about 64 in flight at the 400-cycle metadata latency. At longer
  latencies the limit binds, and requests that cannot issue are replaced by
  the next trigger.
- **`HBT_PTR`.** `HBT_PTR = 0` disables the DRU. After `HBT_PTR` is written
  (a context switch), lines still in flight are discarded when they arrive.
- **Limits.** At the RAS limits, a push onto a full stack drops the oldest
  entry, and a pop of an empty stack is ignored. A full prefetch buffer drops
  new addresses. Pending requests are replaced by a newer trigger.
- **Filter rate.** The filter takes one retired call or return per cycle.
- **Line count.** Table 4 of the paper caps a hyperblock at 16 cachelines,
  while the text says an entry can encode 48. The hardware decodes all 48,
  and the 16-line cap is left to the metadata generator.
- **Not built.** The paper's *dynamic runahead* alternative is not built. It
  chases the most-likely-successor chain in hardware through a metadata
  cache. The paper evaluates it only for comparison and for its depth study.
- **Outside the RTL.** The metadata formation tool chain (branch profiling,
  hyperblock formation, loop skipping) is software and is not included. The
  caches, the load/store and fetch units, and the commit stage belong to the
  host core. The DRU connects to them through the ports above.

## Files

- `rtl/deer_pkg.sv`: shared constants, the retire record, the metadata-entry
  struct and the event struct.
- `rtl/call_ret_filter.sv`, `rtl/ras.sv`, `rtl/runahead_logic.sv`,
  `rtl/md_addr_gen.sv`, `rtl/metadata_fetch_unit.sv`,
  `rtl/prefetch_on_refill.sv`, `rtl/prefetch_buffer.sv`: the blocks.
- `rtl/deer_dru.sv`: the top module.
- `tb/deer_tb_pkg.sv`: reference hash, reference decoder and test-data
  generator.
- `tb/md_mem_model.sv`: behavioural memory with a fixed latency (400 cycles
  by default).
- `tb/tb_<block>.sv`: one self-checking testbench per block.
  - `tb/tb_deer_dru.sv` runs the whole unit at its default sizes.
  - `tb/tb_deer_fig5_example.sv` replays the HB1…HB6 example above through
    three units.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/deer_pkg.sv tb/deer_tb_pkg.sv tb/tb_deer_dru.sv --top-module tb_deer_dru
./obj_dir/Vtb_deer_dru
```

Replace `tb_deer_dru` by any other testbench. Every run takes well under a
second.

What the testbenches establish:

- **`tb_deer_dru`** runs the whole unit at its default parameters against a
  400-cycle memory, in three phases.
  1. While `HBT_PTR` is zero, no reads are issued.
  2. With calls and returns spaced apart, a reference model with its own
     return stack predicts the exact sequence of metadata reads and of
     prefetched line addresses. The phase also checks the 2-cycle and
     402-cycle latencies.
  3. A stress phase runs back-to-back calls and returns, deep call chains
     and runs of returns, a slow L2 port, and an `HBT_PTR` change while reads
     are in flight. Every read and every prefetch must belong to a PC that
     retired, and nothing may be lost once the buffer drains.

  Across the run, every mechanism must occur at least once: both trigger
  kinds, RAS overflow and underflow, both request kinds, replaced requests,
  stalls at the in-flight limit, refills, buffer drops, and discarded stale
  lines.
- **`tb_deer_fig5_example`** encodes the example's entries with an
  independent encoder and checks the exact prefetch streams of three units.
  One uses the main configuration (29 prefetches). One runs with RAS-top
  prefetch off and prefetches into L1 (20). One fetches only the RAS-top
  metadata (9).
- **Block testbenches** compare each block with an independent model under
  random stimulus:
  - the decoder, including empty and full 48-line entries, and its rate of
    one address per cycle;
  - the hash, against a bit-serial version;
  - the RAS and the prefetch buffer, against queue models;
  - the fetch unit: addresses, tags, the in-flight limit, stale lines, and
    the disabled state.

Not verified: synthesis timing, and behaviour on real application traces.
The paper's traces are proprietary, so the unit is exercised only with
synthetic call/return streams and metadata.
