# FMMU: a hardware flash map management unit

This design is a hardware unit for an SSD controller. It translates logical
page numbers to physical flash page numbers. With page-level mapping, a 16 GB
drive needs a 16 MB map: 4M entries of 4 bytes. That map lives in flash, so
the unit keeps part of it on chip in two levels of cache:

- **CMT** (cached mapping table): 64 KB of 64-byte blocks. Each block holds
  16 consecutive entries. It is 256 sets x 4 ways.
- **CTP** (cached translation pages): 1 MB of whole 4 KB translation pages.
  Each page holds 1024 entries. It is 64 sets x 4 ways.
- **GTD** (global translation directory): for each of the 4096 translation
  pages, the flash page it is stored in.

Two clients send requests:

- the host request manager sends `Lookup` and `Update`;
- the garbage collector sends `Lookup` and `CondUpdate`. A `CondUpdate`
  writes only if the entry still holds the old physical page the collector
  copied from. This stops a late garbage-collection copy from undoing a
  newer host write.

The unit talks to three things outside itself:

- the flash controller, which reads translation pages;
- the block manager, which programs translation pages and returns their new
  location;
- a page buffer in SSD RAM, where flash data arrives and leaves.

Every request gets one response with the entry's value before the request,
plus an "applied" flag.

## Files

| file | content |
|---|---|
| `rtl/fmmu_pkg.sv` | widths, packet and MSHR formats, event structs |
| `rtl/fmmu_fifo.sv` | show-ahead queue used for every packet queue |
| `rtl/wrr_arbiter.sv` | weighted round robin over a module's input queues |
| `rtl/gtd.sv` | translation page -> flash page table |
| `rtl/dtl.sv` | dirty translation list and flush victim choice |
| `rtl/cmt.sv` | first-level cache (contains the DTL and an arbiter) |
| `rtl/ctp.sv` | second-level cache (contains the GTD, a flush-order queue and an arbiter) |
| `rtl/fmmu_top.sv` | queues and caches wired together, plain valid/ready ports |
| `tb/ssd_model.sv` | behavioural flash controller, block manager and page buffer |
| `tb/tb_fmmu_env.sv` | shared end-to-end test body |
| `tb/tb_*.sv` | one test per module; `tb_fmmu_full` runs the default (full) size |

## Data path in one paragraph

A request enters the CMT through its input queue. The block number is
DLPN/16 and selects one CMT set. On a hit the response leaves the next
cycle; an Update also marks the block dirty. On a miss the CMT takes a block
and marks it transient. It logs the request inside the block's own 64 bytes
(up to four 16-byte MSHRs) and sends a LOAD (translation page, row) to the
CTP. The CTP answers a resident page with that 64-byte row. Otherwise it
reads the page from flash: the GTD gives the flash address, and the flash
controller fills page-buffer slot *b*, where *b* is the CTP block. When the
row comes back, the CMT replays its MSHRs in order, answers each one, and
writes the line in.

## The hard parts

### Misses kept inside the cache blocks

Neither cache has a separate miss table. A block that is waiting for data has
no useful data yet, so its storage holds the waiting requests.

- In the CMT, the four 128-bit slots of the 512-bit line are MSHRs. A second
  miss to a transient block takes the next free slot (a "merged miss"). A
  fifth one waits.
- In the CTP, row 0 of the 64-row page holds 15 headers of 32 bits. A
  FLUSH's 64 bytes of entries go into row 1+j for header j.
- When the flash read completes, the CTP replays the headers in order:
  - a LOAD reads its row from the page buffer and answers the CMT;
  - a FLUSH writes its row into the buffer.

  Then the CTP copies all 64 rows from the buffer into the page. Replaying
  against the buffer, not the page, means the headers are not overwritten
  while they are still being read.

### Flushing through next links and the DTL

Writing dirty CMT entries back costs a read-modify-write of a whole
translation page. So dirty blocks of one page should go together.

- Each dirty CMT block carries a *next link* to the previous dirty block of
  the same translation page.
- The DTL keeps one entry per translation page with dirty blocks: the head
  of that chain, a count, and an "updated" bit.
- When a block turns dirty, the DTL returns the old head, which becomes the
  block's next link. The new block becomes the head.
- To flush, the DTL is walked once, one entry per cycle. The pick is the
  entry with the highest count, and among equal counts one not updated
  recently. Ties go to the oldest entry. The walk clears the updated bits,
  which gives entries a second chance.
- The chain is then followed, one block per cycle. Each step sends a FLUSH
  (page, row, 64 bytes) to the CTP and marks the block clean.

A DTL entry lookup by page uses a small table instead of a search. The DTL
has one entry per CMT block, so it can never be full.

### Watermarks, forced flushes and staying deadlock free

- The CMT counts its clean blocks. At or below a low watermark (1/8 of the
  blocks) it enters flush mode. It stays there until it is back at a high
  watermark (1/4 of the blocks).
- In flush mode it alternates: one translation page flushed, one packet
  served.
- A miss whose set holds only dirty blocks forces a flush of the page of
  way 0. This happens even outside flush mode.
- The CTP queues pages in the order they turn dirty, which follows the CMT's
  flush order. While more than 1/4 of its pages are dirty, it copies the
  oldest into page-buffer slot NB+*b* and asks the block manager to program
  it.
  - That page is clean but pinned until the new flash address returns and
    is written into the GTD.
  - A CTP miss that finds its set full of dirty or pinned pages also starts
    flushing.

Queues between the caches are bounded, so some rules keep the two caches
from waiting on each other:

- A CMT flush starts only when the CMT->CTP queue has room for the whole
  chain. If it lacks room, the CMT serves a packet first. This lets the CTP
  push its responses and drain.
- A request that cannot go ahead gets a "blocked" flag on its queue. The
  flag clears on a response or when nothing else is pending, so responses
  are never starved.
- The CTP starts a buffer read for a LOAD only when the CMT response queue
  has room.

### Arbitration

The CMT and the CTP each pick their next packet from three queues by
weighted round robin. A weight of *w* gives up to *w* packets in a row.

- CMT queues: host, collector and CTP responses. The host and collector
  weights are input ports; responses have weight 4.
- CTP queues: CMT requests (weight 1), block manager responses (2) and flash
  responses (4).

Responses are weighted higher so that work already started finishes first.

## Timing (measured in simulation)

- A CMT hit is answered 4 cycles after the request is presented. This
  includes the input and output queues.
- A CMT miss that hits in the CTP is answered in 6 cycles.
- A CTP fill takes about 2 cycles per waiting request plus 65 cycles of copy.
- A CMT flush takes 1 cycle per dirty block plus the DTL walk, one cycle per
  entry.

## Where this design departs from the paper

- **One logical page per request.** The MSHR format keeps a count field,
  but it is always 1, so multi-page requests must be split by the sender.
- **Page buffer.** Flash data arrives in SSD RAM through a page-buffer port.
  The unit copies pages to and from it row by row. The paper does not
  describe this path.
- **Own choices** (the paper gives no values):
  - watermarks, the CTP flush threshold, the weights, the queue depths;
  - 15 CTP MSHRs and the row-0 header layout;
  - the flush victim rule, which combines the paper's "most dirty blocks"
    and "least recently updated" policies;
  - the pinned state of a page being programmed;
  - forced flushes of full-dirty sets.
- The CTP MSHR header stores the CMT way where the paper's figure prints
  "CTP way", because the response must name the CMT block.
- The client request managers, garbage collector, block manager and flash
  controller are not part of the design. The tests use behavioural models
  for the flash controller, block manager and page buffer.
- The GTD and the caches are plain arrays. Synthesis turns them into
  flip-flops unless they are mapped to RAM macros. The 1 MB CTP is meant
  for SRAM.

## Sizes

The defaults cover a 16 GB drive:

- a 22-bit logical page number;
- 4096 translation pages, so a 12-bit page number;
- 32-bit physical page numbers.

A larger drive needs a wider `TVPN_W` and a larger `NUM_TVPN`.

## Tests

Every test prints `TB_RESULT checks=N failures=M`.

- The end-to-end tests (`tb_fmmu_top`, `tb_cmt`, `tb_ctp`, `tb_fmmu_full`)
  check every response against a golden map.
- They also check the hit latencies.
- They count each mechanism: hits, misses, merged misses, blocked requests,
  both flush kinds, flush mode, refused CondUpdates and GTD updates.
- `tb_cmt` and `tb_ctp` shrink one cache to stress it.
- `tb_fmmu_full` runs at full size with 30 000 host requests.
