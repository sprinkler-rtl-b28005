# Sprinkler: a resource-driven request scheduler for many-chip SSDs

An SSD with dozens or hundreds of NAND chips is only fast if most of those
chips are busy most of the time. A host I/O usually touches a few pages, and
those pages land wherever the flash translation layer (FTL) has put them. A
scheduler that serves I/Os one after another, in arrival order, leaves most
chips idle. It also misses the chance to give a chip several requests that its
dies and planes could serve together.

Sprinkler turns the scheduling around. It looks at the chips, not at the I/Os.
It accepts I/O tags as they arrive and resolves every page request to its
chip, die, plane and page. It files each request under its chip. It then
walks over the chips and gives each idle chip the largest group of pending
requests that the chip can run as one flash transaction. Requests from
different I/Os may share a transaction, and I/Os finish out of order. The host
still gets each I/O's read data back in order.

This RTL implements the scheduler and the per-channel flash controllers in
SystemVerilog (IEEE 1800-2017). The FTL processor, the host link and the NAND
chips themselves are outside the design and connect through plain ports.

## Terms

| Term | Meaning here |
|---|---|
| I/O, tag | A host request: start logical page, length in pages (1..64), read or write, force-unit-access (FUA) flag. It is identified by its queue slot, the tag. |
| memory request | One 2 KB page of an I/O: tag, index within the I/O, logical page, read/write, physical location. |
| die interleaving | Two dies of one chip work on the same operation at the same time. Any addresses are allowed. |
| plane sharing | Two planes of one die do the same operation together. They must use the same page offset. |
| PAL level | The parallelism a transaction uses. NON: one request. PAL1: plane sharing. PAL2: die interleaving. PAL3: both, up to 4 requests. |
| overlap depth | How many pending requests one transaction on this chip can serve (1..4). |
| connectivity | Within a candidate group, the largest number of members that belong to the same I/O. |
| RIOS | Resource-driven I/O scheduling: the chip-by-chip traversal. |
| FARO | Parallelism-aware over-commitment: the group choice at each chip. |

## Block structure

```
 host --> layout_builder --(core: translate)--> phy_layout <--(core: readdress)
             |  tags                              |  one chip row per cycle
          tag_queue <--------------------- rios_scheduler + faro_select
             |  issued/done bitmaps               |  commit (channel, offset, group)
          dma_engine --> host payloads    flash_controller x NUM_CHANNELS --> NAND bus
             ^                                    |
             +------------ completion upcall -----+
```

| File | Role |
|---|---|
| `rtl/sprinkler_pkg.sv` | Widths, request/location/group structs, PAL encoding |
| `rtl/tag_queue.sv` | Device-level queue: 32 tags, each with 64-bit "issued" and "done" bitmaps |
| `rtl/layout_builder.sv` | Takes I/Os in, has each page translated by the core, and files it in the layout. It also drains the queue around FUA I/Os. |
| `rtl/phy_layout.sv` | Table of pending requests: 64 chip rows × 16 slots. It also applies readdressing callbacks. |
| `rtl/faro_select.sv` | Combinational group choice for one chip row |
| `rtl/rios_scheduler.sv` | Chip traversal and commit |
| `rtl/flash_controller.sv` | One per channel: transaction sequencing, shared-bus arbitration, cell timing, completion upcalls |
| `rtl/dma_engine.sv` | In-order payload release and I/O retirement |
| `rtl/sprinkler_top.sv` | Wiring, plus event strobes for performance counters |

## How a chip gets its work (RIOS)

Chips are numbered so that consecutive numbers lie on different channels:
chip = offset × NUM_CHANNELS + channel. With 8 channels, channel 0 holds chips
0, 8, 16 and so on. The scheduler visits one chip per clock, in number order.
It therefore steps across all channels at one offset before it moves to the
next offset. Consecutive commits go to different channel buses, and their bus
transfers overlap.

On each visit:

- A chip that is busy, or has nothing pending, is passed over until the next
  round. The `ev_busy_skip` strobe marks a busy chip that had pending work.
- An idle chip with pending work gets one group. The slots of that group are
  cleared in the layout in the same cycle.
- The group is marked issued in the tag queue.
- The group goes to the channel's flash controller.
- Write members are announced on `wr_fetch`, so the host side can start moving
  their data.

Scheduling runs all the time, alongside arrivals. There is no batching step.

## Choosing the group (FARO)

`faro_select` looks at the up-to-16 pending requests of the visited chip.

1. **Hazard filter.** A write is not eligible while a read of the same logical
   page is pending in the same chip, so the read goes first.
2. **Plane pairs.** For every eligible request, the selector finds a partner.
   The partner is the first eligible request in the other plane of the same
   die, with the same page offset and the same operation.
3. **Candidates.** A candidate is one seed from die 0 (or none), plus its
   partner, plus one seed from die 1 (or none), plus its partner. All members
   must have the same operation. The selector tries every die-0 × die-1 seed
   pair in parallel. That is at most (16+1)² combinations of small comparators.
4. **Ranking.** Overlap depth (member count) ranks first. Connectivity breaks
   ties. Remaining ties go to the lowest slot numbers.

The chosen group is delivered by position (die×2 + plane). It comes with its
depth, connectivity and PAL level.

A group can combine two half-groups from unrelated I/Os on different dies.
This raises the parallelism of one transaction. It can also pull a request
ahead of older ones. That is intended: over-commitment trades strict order for
fewer, fuller transactions.

## Flash transactions

Each channel has one `flash_controller` holding a small state machine per
chip: idle → bus-in → cell → bus-out → done. The bus is shared and arbitrated
round-robin among chips that need it.

| Step | Read | Write |
|---|---|---|
| Bus in | T_CMD per member | T_CMD + T_XFER per member |
| Cell | one activity of T_READ | one activity of the longest member program time |
| Bus out | T_XFER per member | none |

Even pages program in T_PROG_FAST, odd pages in T_PROG_SLOW. While bus-in and
bus-out wait for the bus, other chips on the channel use it. While the cells
work, the bus is free.

Measured latency at an idle bus, with n members:

- Read: n·(T_CMD+1) + 1 + T_READ + n·(T_XFER+1) + 1 cycles.
- Write: n·(T_CMD+T_XFER+1) + 1 + program time.

After that, a completion upcall hands the group back. Upcalls from all
channels reach the tag queue round-robin, one per cycle. The chip is free
again once its upcall is taken.

Default timings assume a 100 MHz clock:

| Parameter | Default | Meaning |
|---|---|---|
| T_READ | 2000 | 20 µs read |
| T_PROG_FAST | 20000 | 200 µs program |
| T_PROG_SLOW | 220000 | 2.2 ms program |
| T_XFER | 1024 | 2 KB at 200 MB/s, an ONFI 2.x class bus |
| T_CMD | 8 | command and address cycles |

## Returning data in order

Each queue entry has two 64-bit bitmaps:

- *issued*: set at commit, cleared by the completion upcall.
- *done*: set by the completion upcall.

The DMA engine keeps a pointer per entry. It releases payload descriptors
(`pay_tag`, `pay_idx`, `pay_lpn`) strictly in index order, as soon as the next
index is done. It retires the tag on `done_valid` when the pointer reaches the
I/O's length. Writes produce no payloads: their data was fetched at commit.
64 bits per entry cover 64 × 2 KB = 128 KB per I/O. Larger host transfers must
be split into 128 KB I/Os.

## Hazards and FUA

- **Write after read** on the same page is handled by FARO's hazard filter.
- **Read after write and write after write** are not reordered against each
  other here. The write data still sits in the host buffer during scheduling,
  so the host side can serve or merge those cases.
- **FUA.** A force-unit-access I/O must not be reordered. The layout builder
  accepts it only once the queue is empty. It then holds every later I/O until
  the queue has drained again (`ev_fua_wait`).

## Readdressing after migration

Garbage collection in the FTL may move a page whose read is still pending. The
core then calls `rel_valid/rel_lpn/rel_new`. For every pending read of that
page:

- If the move stays on the same chip, die and plane, nothing changes
  (`ev_rel_ignored`).
- If it moves to another die or plane of the same chip, the entry is updated in
  place.
- If it moves to another chip, the request is moved to that chip's row, one per
  cycle. The callback waits (`rel_ready` low) while the destination row is full.

Pending writes are not readdressed, because the FTL chooses their location.

## Interface of `sprinkler_top`

| Group | Signals |
|---|---|
| Host | `host_valid/host_req/host_ready/host_tag` (I/O in); `pay_*` (read payload descriptors, valid/ready); `done_valid/done_tag`; `wr_fetch` (write members committed this cycle) |
| Core | `xlat_valid/xlat_req/xlat_ready` then `xlat_rsp_valid/xlat_rsp` (one translation at a time); `rel_*` (readdressing) |
| Flash | `ch_bus_busy`, `chip_rb_n` |
| Events | `ev_commit` with `ev_pal/ev_depth/ev_conn`; `ev_busy_skip`, `ev_war_hold`, `ev_bus_contention`, `ev_fua_wait`, `ev_rel_moved`, `ev_rel_ignored`, `ev_layout_full`, `ev_queue_full` |

All logic uses the rising edge of `clk` and an asynchronous active-low
`rst_n`.

## Where this design departs from, or adds to, the published description

- **Geometry.** Each chip is read as 2 dies × 2 planes. The description gives
  "two dies and four planes" per chip, which fits four planes in total.
- **Program-time labels.** The description calls the 200 µs program time the
  *slow* page and the 2200 µs one the *fast* page. That looks swapped, so here
  200 µs is fast and 2200 µs is slow. The even/odd page assignment is this
  design's own.
- **Timing choices of this design.** The clock, bus rate, T_CMD, a queue depth
  of 32, and 16 layout slots per chip are not given.
  - The description mentions 256 KB of layout information (65,536 four-byte
    entries).
  - This design holds 1,024 pending requests (64 × 16) and stalls the builder
    when a chip row is full.
  - A location is 32 bits, i.e. four bytes.
- **One chip per cycle.** The traversal visits one chip per clock. A busy chip
  is simply passed over.
- **Uniform transactions.** All members of a transaction have the same
  operation.
- **FUA.** FUA is implemented as a full drain before and after the I/O.
- **Readdressing.** Only pending reads are readdressed.
- **Internal timers.** The controllers time cell operations with internal
  timers and do not poll ready/busy.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_faro_select` | Directed cases, plus 300 random rows against a brute-force search over all subsets |
| `tb_tag_queue` | Allocation, bitmaps, round-robin upcalls |
| `tb_phy_layout` | Insert/clear, and every readdressing case |
| `tb_layout_builder` | Translation order, FUA drain |
| `tb_rios_scheduler` | Visit order, busy skip, commit routing |
| `tb_flash_controller` | Exact cycle counts against the formulas above, and bus sharing |
| `tb_dma_engine` | In-order release under scrambled completion |
| `tb_sprinkler_top` | End to end, on 2 channels × 2 chips with short timings and 80 random I/Os |
| `tb_sprinkler_full` | All default parameters (64 chips, real timings) |

`tb_sprinkler_top` checks in-order payloads, one fetch per write request,
completion after all data, and the write-after-read rule. It also requires
that each mechanism occurs at least once:

- all four PAL levels
- busy skip and hazard hold
- bus contention
- FUA wait
- moved and ignored readdressing
- full layout row and full queue
- out-of-order completion

`tb_sprinkler_full` runs a 64-page read striped over all chips, a 64-page
fast-page write and a slow-page write through the design at all default
parameters. It checks their latencies against the timing above. It runs for
about 250,000 cycles and takes under a minute with Verilator.

`tb/ftl_model.sv` is a behavioural stand-in for the core. It is for
testbenches only. It maps logical page *p* on an N-chip drive to:

- chip *p* mod N
- die ⌊*p*/N⌋ mod 2
- plane ⌊*p*/2N⌋ mod 2
- page ⌊*p*/4N⌋ mod 128

Running a test with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_sprinkler_top \
  rtl/sprinkler_pkg.sv rtl/tag_queue.sv rtl/faro_select.sv rtl/rios_scheduler.sv \
  rtl/phy_layout.sv rtl/layout_builder.sv rtl/flash_controller.sv rtl/dma_engine.sv \
  rtl/sprinkler_top.sv tb/ftl_model.sv tb/tb_sprinkler_top.sv
./obj_dir/Vtb_sprinkler_top
```

## Scaling

Other configurations only need parameter overrides on `sprinkler_top`:

- 256 chips, e.g. 16 × 16.
- 1024 chips on 32 channels (32 × 32). 1024 chips is the limit of the 10-bit
  chip index.

The layout table grows as chips × SLOTS × 69 bits. FARO's comparator count
grows with SLOTS², so SLOTS is the main knob for area.
