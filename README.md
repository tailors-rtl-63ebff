# Tailors: a buffer that may be overbooked

Sparse tensor accelerators cut their operands into tiles and copy each tile
into an on-chip buffer, where it is reused many times. How many nonzeros a
tile holds is not known until the tensor has been traversed. So a designer who
wants every tile to fit must size tiles for the worst case, and most of the
buffer then stays empty. *Overbooking* does the opposite. It picks a tile shape
that is large enough for the buffer to be well used, and accepts that a small
share of tiles (about 10% in the reference evaluation) hold more data than the
buffer can. Hardware must then keep such a tile correct and still fast.

A **Tailor** (tail-overbooked buffer) does this. It is a *buffet*, the
explicitly managed queue with Fill, Read(index), Update(index, data) and
Shrink(num) operations, plus one new operation: the *overwriting fill*. When a
tile does not fit, the Tailor keeps the head of the tile resident and reuses it
at full speed. It turns the last few slots of the buffer into a small FIFO. The
rest of the tile (the *bumped* part) is streamed through that FIFO from the
parent level, again for every traversal. The child still addresses the tile by
its own index, as if the whole tile were present. The Tailor translates the
index, and reads of bumped data simply wait until that data streams past.

This repository holds synthesizable SystemVerilog for the Tailor, for the
address generators that drive it from above and below, and for a two-level
memory hierarchy built from them: DRAM, then a global buffer, then a PE
buffer, then the PE datapath. Every on-chip level is a Tailor, so a tile can
overbook the global buffer, a subtile can overbook the PE buffer, or both.

```
            per operand (A and B each have their own chain)

  DRAM port  <--req/resp--  fill_agen  --fill-->  tailor_buffer (global, 3,932,160 words)
                                ^                        |  read port
                      streaming, restart_idx,            v
                      tile_done                      fill_agen  --fill-->  tailor_buffer (PE, 16,384 words)
                                                          ^                     |  read / shrink
                                                          |                     v
  tile_sequencer --commands--> both fill_agens,       read_agen  -->  pe_out (PE datapath)
                 shrink of the global buffer           (scan, passes, Shrink(len))
```

## 1. The Tailor buffer (`tailor_buffer`)

### 1.1 Buffet mode

The storage is `CAP` words, used as a circular queue. A head pointer `hp` gives
the physical slot of tile index 0. `occupancy` counts the elements present
from the head, and `credits = CAP - occupancy` counts the free slots.

* **Fill** writes at the tail, slot `hp + occupancy`, while credits remain.
* **Read(i)** and **Update(i, d)** address slot `hp + i`. If `i` is not yet
  present, the request stalls: `rd_ready`/`upd_ready` stay low until the data
  arrives.
* **Shrink(n)** moves the head on by `n` and returns `n` credits.

The parent sends every element with its index in the tile and a `last` flag.
A tile is finished when a shrink covers its whole known length. The buffer then
resets to empty and pulses `ev.tile_done`.

### 1.2 Overbooking: two regions in one array

If the buffer is full and the parent offers another element of the same tile,
that element becomes an **overwriting fill**. Overwriting fills are allowed only
on a full buffer. A full buffer already refuses ordinary fills, so the two
kinds never race for the tail.

Let `F = cfg_fifo_size` and `H = CAP - F` (the *FIFO head*). The first
overwriting fill splits the buffer into two regions:

| logical offsets | region | managed by |
|---|---|---|
| `[0, H)` | buffet-managed region: tile indices `0 .. H-1`, kept for the whole tile | reads/updates use the index as it is |
| `[H, CAP)` | FIFO-managed region: a window of `F` consecutive elements of the bumped part | overwriting fills |

In one step the initial overwriting fill empties the FIFO region. This drops
the resident indices `H .. CAP-1`. The fill then writes the first bumped
element, index `CAP`, into the region. Later overwriting fills append until the
region holds `F` entries. After that, each one replaces the least recent entry.
The region is a rolling buffer: `f_roll` is the slot of its least recent entry
and `f_base` is that entry's tile index.

The parent streams the bumped part `[H, L)` (for a tile of length `L`) again
and again. After the last element it wraps back to index `H`. So the window
slides cyclically over `[H, L)`. It does not cover `[CAP, L)` only: indices
`H .. CAP-1`, which the split dropped, come round as well.

**Index translation.** For a read or update of index `i`:

* If `i < H`, the element is in the buffet region at offset `i`.
* Otherwise the Tailor forms the cyclic distance of `i` from the least recent
  FIFO entry:
  `d = i - f_base`, or `d = i - f_base + (L - H)` when `i` lies past the wrap.
  The element is resident when `d` is less than the number of FIFO entries. It
  then sits at *buffer offset* `H + d`, in region slot `(f_roll + d) mod F`.

The *FIFO offset*, `f_base - H`, is exposed as a status output. Without a wrap
the buffer offset equals `i - FIFO offset`, which is the classic form of the
rule. The cyclic distance extends the rule to a window that has wrapped round
the end of the tile.

### 1.3 A worked trace

This is the reference example: a buffer of four slots, a FIFO region of two
(`H = 2`), and a tile `a b c d e f` at indices 0..5. The unit testbench replays
it step for step and checks every value below.

| step | operation | buffer contents (offsets 0..3) | FIFO offset | buffer offset read |
|---|---|---|---|---|
| 1 | Fill(d) | a b c d | – | |
| 2 | Read(3) | a b c d | – | 3 |
| 3 | OWFill(e): split, region emptied | a b e · | 2 | |
| 4 | Read(4) | a b e · | 2 | 2 |
| 5 | OWFill(f): region full | a b e f | 2 | |
| 6 | Read(5) | | 2 | 3 |
| 7 | Read(0) | | 2 | 0 |
| 8 | Read(1) | | 2 | 1 |
| 9 | OWFill(c): parent wrapped to index 2, replaces e | a b c f | 3 | |
| 10 | Read(2) | | 3 | 3 |
| 11 | OWFill(d): replaces f, window wraps | a b c d | 0 | |

At step 9 the window holds `f` (index 5) and `c` (index 2). Index 2 is one step
past `f` in cyclic order, so Read(2) is served from offset `2 + 1 = 3`, the
slot `c` physically occupies. At step 11 the least recent entry becomes `c`
again, so the FIFO offset goes back to 0.

### 1.4 Never overwrite unread data, unless the reader is waiting

An overwriting fill may replace a FIFO entry only after that entry has been
read at least once. Each region slot has a "read since written" bit for this.
For the same reason the initial overwriting fill waits until index `CAP-1` has
been read. Otherwise the split could drop data that a scanning reader has not
reached yet. Under a scan this gives the intended behaviour: the window
advances as fast as the reader consumes it, and no element is lost. A parent
that runs ahead is held back by `fill_ready`.

Both waits are lifted while a read is stalled on an element that is not
resident. The reader then needs the window to move, and any entries the window
passes over come round again on the next cycle of the stream. This matters when
two levels overbook on the same data. Suppose a PE subtile that does not fit
the PE buffer lies in the part of a global tile that the global buffer is
streaming. The PE level's parent then asks the global buffer for an element
the global window has already passed. Under the strict rule, the global window
would wait for its unread entries while the PE level waited for that element,
and neither would move. With the release, the global window cycles on until
the element comes round.

### 1.5 Shrinking an overbooked tile: backfill

A Shrink(n) on an overbooked buffer frees the first `n` elements of the buffet
region. Refilling the freed slots from the stream directly would break the
index order. Instead the Tailor:

1. drops the whole FIFO region and keeps indices `n .. H-1`, which become the
   new `0 .. H-n-1` (tile indices are renumbered after every shrink);
2. enters `TL_BACKFILL` and discards streamed elements until the one right
   after the kept data (new index `H-n`) comes round;
3. from then on takes ordinary fills again, and overbooks a second time if the
   rest of the tile still does not fit.

### 1.6 Status outputs

* `mode`: `TL_NORMAL`, `TL_OVERBOOK` or `TL_BACKFILL`.
* `streaming`: high in both non-normal modes. It tells the parent to keep
  cycling.
* `restart_idx`: the tile index the parent wraps to. It is `H` while
  overbooked, and the first missing index while waiting to backfill.
* `ev`: a `tl_event_t` of one-cycle flags (fill, initial/later overwriting
  fill, overwrite of an entry, discard, shrink, shrink while overbooked, tile
  done, read stall) for monitors and performance counters.

### 1.7 Interface timing

* All requests are valid/ready handshakes that fire on the rising edge.
* Read data and the buffer offset they came from appear one cycle after the
  read fires (`rd_resp_valid`).
* A shrink takes its whole cycle: `shr_ready` is always 1, and fills, reads
  and updates wait while a shrink is valid.
* There is one write port. An accepted fill wins over an update in the same
  cycle.
* Reset is synchronous and active low. The data array itself is not reset.
* Assertions check that:
  * an overwriting fill only meets a full buffer;
  * the bumped part arrives in order;
  * a shrink never exceeds the occupancy;
  * the FIFO size is legal.

## 2. Address generators

### 2.1 `fill_agen`: the parent side

`fill_agen` takes a command (parent address of element 0, tile length). For
each element it makes one read request to the parent, waits for the word, and
pushes the word into the child Tailor with its index and `last` flag. One
cycle after the last element is accepted, it samples the child:

* If `streaming` is high, it wraps to `restart_idx` and streams the bumped part
  again. `ev_wrap` pulses on each wrap.
* Otherwise the tile is complete. The generator idles until the child reports
  `tile_done`.

`tile_done` ends the command in any state. An element still in flight at that
moment is dropped, and a parent response still on its way is drained.

Only one parent read is outstanding at a time, so each element costs three
cycles plus the parent's latency. The parent may be a DRAM port or the read
port of a parent-level Tailor. In the second case a read of bumped data in the
parent just stalls, which is how the two levels synchronise.

### 2.2 `read_agen`: the child side

`read_agen` traverses a tile `0 .. len-1` in order, for a given number of
passes. It issues one Read per cycle when nothing stalls, and forwards each
returned word with its index and pass number. After the last read it frees
the tile with a single Shrink(len) and pulses `done`. With no stalls, `P`
passes over `N` elements take `P·N` read cycles, plus one cycle for the
shrink.

## 3. The hierarchy

### 3.1 `tile_sequencer`

The sequencer runs one operand's schedule, given as a `tile_cfg_t`: DRAM base,
global tile length, PE subtile length, and the number of traversals at each
level.

1. It starts the global-level `fill_agen` on the tile.
2. For each global traversal, it cuts the tile into consecutive subtiles of
   `pe_len` elements (the last may be shorter).
3. For each subtile, it starts the PE-level `fill_agen` and the PE `read_agen`
   together, and waits for the subtile to be shrunk.
4. Finally, it shrinks the whole tile out of the global buffer. The child
   level drives the shrinks of its parent.

### 3.2 `tailors_top`

`tailors_top` instantiates one such chain per operand (`NOPS = 2`, for A and
B). At its boundary:

* the DRAM request/response ports are outputs and inputs;
* the PE datapath's side is the `pe_out_*` stream plus the PE buffer's Update
  port;
* for monitoring, it also brings out each level's mode, events, occupancy,
  credits, FIFO offset and parent wraps (`*_restream`).

The global buffer's Update port is tied off, because nothing above the PEs
writes into it in this hierarchy.

## 4. Sizes

| parameter | default | origin |
|---|---|---|
| global buffer per operand `GLB_CAP` | 3,932,160 words | a 30 MB global buffer split evenly between A and B, 32-bit words |
| PE buffer `PE_CAP` | 16,384 words | one dense 128×128 tile, the PE tile of the fixed-tiling baseline |
| largest FIFO region `MAX_FIFO` | 64 | own choice; `cfg_fifo_size` selects 1..64 at run time |
| word `DATA_W`, index `TIDX_W` | 32, 32 | own choice |
| operands `NOPS` | 2 | A and B of A×Aᵀ |

At these defaults the top synthesizes (generic yosys cells) to about 1,800
logic cells and 2,500 flip-flop bits. It also needs 252,706,816 bits of memory
arrays: (2 × 3,932,160 + 2 × 16,384) × 32.

## 5. Where this design departs from, or goes beyond, the reference description

* **FIFO offset bookkeeping.** Two statements disagree on when the FIFO offset
  returns to zero. One says it resets whenever the buffet region is read. The
  worked example instead keeps it unchanged across such reads, raises it by
  one on an overwrite, and returns it to zero when the window wraps past the
  tile's last element. This design follows the worked example (section 1.3)
  and defines the offset as `f_base - H`.
* **Read before overwrite, released by a stalled read** (section 1.4) and the
  **backfill-wait mode** (section 1.5) are this design's own ways of meeting
  the stated requirements: no loss of data, and backfill only once the stream
  reaches data after the kept region.
* **Index and `last` sideband.** The parent tags every element with its index
  and a `last` flag. The Tailor needs both to find the backfill point and to
  learn the tile length, so that it can roll its window over the end of the
  tile.
* **One PE lane per operand.** The reference accelerator has 128 PEs and an
  intersection-based PE datapath. Neither the datapath nor the way a global
  tile is shared among PEs is specified, so neither is built: `pe_out` carries
  what one PE would consume.
* **Dense scans.** A compressed tile is read in stored order, position
  `0 .. len-1`. Coordinate decoding and operand intersection belong to the PE
  datapath and are not modelled. Pass counts stand in for the reuse the
  dataflow makes.
* **Tile-size selection.** The statistical method that chooses an overbooking
  tile size (sampling tiles, then scaling to the desired overbooking rate) is
  offline software. Its result enters here only as `glb_len` / `pe_len`.
* **Timing is this design's own.** The reference gives a 1 GHz clock, 4 DRAM
  channels and 68.25 GB/s. It gives no cycle-level timing for buffer or
  address generator, so every latency above is this design's own.

### Overbooking at two levels at once

The reference description treats each level on its own. When a PE subtile
overbooks while the global buffer is itself streaming that part of the tile,
the two FIFO windows interact. Section 1.4 describes how this design keeps both
moving: the stricter level yields to a stalled reader. The price is extra
traffic. While the PE level waits on an element behind the global window, the
global buffer streams the rest of its bumped part from DRAM once more. How the
original design handles this case is not stated.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it does |
|---|---|
| `tailor_buffer_tb` | the trace of section 1.3 at `CAP=4, F=2`; buffet fill/read/update/shrink, stalls and credits at `CAP=16, F=4`; six tiles (the first fits, the others are 17 to 48 elements long) streamed through a 16-word buffer and scanned two or three times, the last three with a random shrink while overbooked (backfill); every word read is compared with the word sent for that index |
| `fill_agen_tb` | three tiles pushed from a random-latency memory into a scripted child with random `fill_ready`: one that fits, one during which the child streams and asks for a restart, and one ended by `tile_done` while a parent read is outstanding; checks every index, `last` flag and word, and that no command is taken before `tile_done` |
| `read_agen_tb` | scans with stalls; data, index, pass, shrink size and exact cycle counts |
| `tile_sequencer_tb` | subtile cut, command order, pass counts, final shrink |
| `tailors_top_tb` | whole hierarchy at `GLB_CAP=64, PE_CAP=16`: global overbook, PE overbook (several passes), both fitting, both levels overbooked on the same data, and a write-back through the PE buffer's Update port that later passes must see; every word at `pe_out` checked against DRAM; fails any mechanism that never happened (overbook at each level and at both at once, overwrite, re-stream, stall, tile release) |
| `tailors_top_full_tb` | the top at its default sizes: a 20,000-word tile whose 17,000-word subtile overbooks the PE buffer, then a tile 1,000 words larger than the global buffer (3,933,160 words) streamed once; about 4 million checks, about 30 s |

| `tailors_workload_tb` | miniature workloads: a banded 256×256 matrix (like a system of linear equations) and a scattered one with hub rows and columns (like a graph), each cut into uniform square tiles whose side is chosen so that about 10% of the tiles are larger than a 256-word global buffer; A and Aᵀ tiles stream through the two operand chains; checks every word and that exactly the oversized tiles overbooked |

`tb/dram_model.sv` is a behavioural DRAM channel used by the top testbenches.
Word `a` holds `a·0x2545F491 + SEED·0x00010001`, and each request gets a random
latency of 0..`LAT` cycles, with responses in order.

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/tailors_pkg.sv tb/tailors_top_tb.sv --top-module tailors_top_tb
./obj_dir/Vtailors_top_tb +verilator+rand+reset+2
```

Replace the testbench name for the other benches. The RTL also reads cleanly
into yosys with its slang front end.
