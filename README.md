# TA-LRW: a thermal-aware write policy for an STT-MRAM L2 cache

STT-MRAM cells heat up when they are written: a single block write raises the
temperature of the written cells by roughly 9 K, and the heat spreads to the
neighbouring blocks. A hotter cell has a lower thermal stability factor, so
retention failures, read disturbance and write failures all become more
likely. With an ordinary LRU cache, consecutive writes into a set very often
hit the same block or the block next to it, so the heat piles up in a few
places.

This RTL implements an L2 cache that sends the writes of a set to blocks that
are physically far apart. The policy is *Thermal-Aware Least-Recently-Written*
(TA-LRW). Every set has a small write pointer. **Every** block that enters the
data array goes into the block the pointer selects, whether it is a fill after
a read miss, a writeback miss or a writeback hit. The pointer then steps to the
next block of a fixed write order. Two consecutive writes into a set are
therefore always at least three blocks apart. The block under the pointer is
the least recently written block of the set, so it is also the victim.
Because the victim is chosen by write age, the policy costs no more than FIFO
(3 bits per set for 8 ways, against 24 for true LRU). Reads do not update any
replacement state.

The default configuration is a 1 MB, 8-way, 64-byte-block L2 with a 10 ns read
and a 20 ns write access time, clocked at 1 GHz (10 and 20 cycles).

## The write order

The blocks of a set, B0 to B7, sit side by side. The pointer visits them in
this order:

    B0 -> B5 -> B2 -> B7 -> B3 -> B6 -> B1 -> B4 -> (back to B0)

| step      | 0→5 | 5→2 | 2→7 | 7→3 | 3→6 | 6→1 | 1→4 | 4→0 |
|-----------|-----|-----|-----|-----|-----|-----|-----|-----|
| distance  |  5  |  3  |  5  |  4  |  3  |  5  |  3  |  4  |

In every round of eight writes, three steps are 3 blocks long, two are 4 and
three are 5. So 37.5 %, 25 % and 37.5 % of writes land 3, 4 and 5 blocks from
the previous write, whatever the access pattern. No order of 8 blocks can keep
every step at 4 or more, so 3 is the best minimum distance. This order is one
of the 176 orderings of eight blocks whose steps, including the step back to the
start, are all at least 3 blocks; it was picked because it gave the
least accumulated heat under a block-to-block heat-spread model.

The order lives in one constant, `WRITE_PERM` in `rtl/talrw_pkg.sv`.
`perm_next()` there gives the successor of a block.

## What happens on each request

The controller (`rtl/talrw_ctrl.sv`) serves L1 requests one at a time.
"Pointed block" below means the block the set's write pointer selects.

| request   | lookup                       | action                                                               | pointer  |
|-----------|------------------------------|----------------------------------------------------------------------|----------|
| read      | hit                          | read the found block, return it                                      | unchanged |
| read      | miss                         | fetch from memory, return it, write it into the pointed block        | advances |
| writeback | hit, found block = pointed   | overwrite the found block                                            | advances |
| writeback | hit, found block ≠ pointed   | invalidate the found block, write the data into the pointed block    | advances |
| writeback | miss                         | write the data into the pointed block                                | advances |

The fourth row is what sets TA-LRW apart from ordinary replacement policies.
A conventional cache must overwrite the block that already holds the line,
and that block is often one of the most recently written (hottest) ones.
TA-LRW moves the line to the pointed block instead. That costs nothing
extra, because an L1 writeback always carries the whole 64-byte block.

The cache is write-back. If the pointed block is valid and dirty, it is
first read from the array and sent to memory. Only then is it overwritten.
This also happens when a writeback hit is redirected: the block under the
pointer then belongs to a different line.

### Sequencing and timing

The controller states are:
`IDLE → LOOKUP → {RD_ISSUE → RD_WAIT | [EV_ISSUE → EV_WAIT → EV_MEM] →
[FETCH_REQ → FETCH_WAIT] → WRITE → WRITE_WAIT} → IDLE`.

With the default array timing:

* **Read hit.** The response comes `READ_LAT + 3` = 13 cycles after the
  request is accepted: one cycle to accept, one for lookup, one to issue, then
  10 in the array.
* **Writeback.** The acknowledge comes once the array write is done:
  `WRITE_LAT + 3` = 23 cycles without an eviction.
* **Read miss.** The data is returned in the cycle the fill write is issued.
  The controller then stays busy for the 20-cycle write.
* **Dirty eviction.** This adds a 10-cycle array read and the memory
  handshake.

`cpu_req_ready` is high only in `IDLE`.

## Two ways to build the pointer

Both implementations select the same blocks in the same order. The parameter
`METHOD` chooses between them (default 1):

* **METHOD 1.** The pointer register holds the block number itself and steps
  through the write order (`wp_sequencer`, next-state table). A plain 3-to-8
  decoder drives the block select (`way_decoder`).
* **METHOD 2.** The pointer is a plain modulo-8 counter. The permutation is
  moved into the decoder: output *k* drives block `WRITE_PERM[k]`. The
  next-state logic is then a simple incrementer, and the shuffle is pure
  wiring.

## Modules

| file                   | role |
|------------------------|------|
| `talrw_pkg.sv`         | geometry constants, write order, request and event types |
| `wp_sequencer.sv`      | next pointer value after a write (permutation step or +1) |
| `way_decoder.sv`       | 3-to-8 block select from the pointer, straight or permuted |
| `wp_table.sv`          | one pointer per set (2048 × 3 bits), read port plus advance port |
| `tag_array.sv`         | tags, valid and dirty bits; lookup, victim state, update port |
| `stt_data_array.sv`    | 16384 × 512-bit block store with 10-cycle read and 20-cycle write |
| `talrw_ctrl.sv`        | request flow of the table above |
| `talrw_l2.sv`          | top: wires the controller, the arrays and the pointer logic |

Top-level ports of `talrw_l2`:

* `cpu_req_valid/ready/type/addr/wdata` and `cpu_resp_valid/type/rdata`.
  These face L1 and use 32-bit byte addresses. `type` is `REQ_READ` or
  `REQ_WRITEBACK`.
* `mem_req_valid/ready/we/addr/wdata` and `mem_resp_valid/rdata`. These face
  memory and use 26-bit block addresses. A write is posted. A read is answered
  later on `mem_resp_valid`.
* `wr_evt_valid/set/way`. These pulse once per block write into the array, so
  a thermal model or a monitor can follow where the heat goes.
* `evt`. This gives one pulse per controller decision: read hit, read miss,
  writeback in place, writeback redirected, writeback miss, eviction.

Parameters of `talrw_l2`: `SETS` (2048), `METHOD` (1), `READ_LAT` (10) and
`WRITE_LAT` (20). The associativity (8) and block size (64 B) are package
constants. The write order is defined only for 8 ways.

## How far this follows the reference design

These parts follow the published policy:

* the write order and the per-set pointer;
* the rule that every write goes to the pointed block;
* invalidation of a found block that is not under the pointer;
* reads leaving the pointer alone;
* both pointer implementations;
* the cache geometry and the 10/20 ns access times.

These parts are this design's own choices, because the policy description
does not cover them:

* **One request at a time.** The reference L2 is non-blocking, but its miss
  handling is not specified. This controller is blocking.
* **Dirty victims.** They are written back before they are overwritten. The
  cache is write-back, but the policy description does not spell this step
  out.
* **Read-miss response.** It is sent when the fill write is issued.
* **Addresses.** They are 32 bits wide: 6 offset bits, 11 index bits and 15
  tag bits.
* **Reset.** Reset is synchronous and active-low. It clears all valid and
  dirty bits and points every set at B0.
* **Arrays.** Tag and pointer state are flip-flop arrays with combinational
  lookup. The data array is a single-ported, unbanked memory.
* **Cell errors.** The STT-MRAM cells are ideal storage. Write failure, read
  disturbance and retention failure are not modelled. Neither is temperature.
  Thermal effects can be studied outside the RTL from the `wr_evt_*` stream.
* **METHOD 2 wiring.** Decoder output *k* drives block `WRITE_PERM[k]`. This
  follows from the write order; it was not copied from a wiring drawing.
* **Pointer update.** The pointer advances in the cycle the array write is
  issued, not when the write completes.
* **Clock.** The cache is assumed to run on the 1 GHz core clock. That is
  what turns 10 ns and 20 ns into 10 and 20 cycles.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench              | what it checks |
|------------------------|----------------|
| `wp_sequencer_tb`      | successor table, one full round, each step ≥ 3 blocks, counter for METHOD 2 |
| `way_decoder_tb`       | straight and permuted decoder outputs against the written-out order |
| `wp_table_tb`          | random advances over 16 sets against a per-set write counter |
| `tag_array_tb`         | random fills, dirty marking and invalidations against a model; hit, found way, victim state |
| `stt_data_array_tb`    | exact 10 and 20-cycle latencies, busy while in use, data against a model |
| `talrw_ctrl_tb`        | every branch of the request table, walked by hand with METHOD 2; blocks written, eviction addresses and data, pointer untouched by reads |
| `talrw_l2_tb`          | see below |
| `talrw_l2_methods_tb`  | METHOD 1 and METHOD 2 caches (16 sets) in lockstep on the same random traffic; every output compared on every cycle |

`talrw_l2_tb` runs the full-size cache at its default parameters. It sends
3000 random reads and writebacks, mostly to four busy sets with a small tag
pool, and some scattered over all 2048 sets. An independent model of the
policy predicts, for every request:

* the decision;
* the block written;
* any eviction (address and data);
* the data returned.

The testbench also checks:

* that consecutive writes of a set are at least 3 blocks apart;
* the 13-cycle read-hit latency;
* the 23-cycle in-place writeback latency.

It counts each mechanism (the five request cases, evictions on reads and on
writebacks, full pointer rounds, memory back-pressure, write distances 3, 4
and 5) and fails if any of them never happened. It also prints the shares
of distances 3, 4 and 5, which are checked against 3/8, 2/8 and 3/8. Finally
it prints a histogram of the LRU age of every replaced block, where 7 means
the least recently read or written block of the set. This measures how often
evicting by write age picks the block true LRU would have picked. With the
uniform random traffic of this test about 70 % of replacements hit the LRU
block. Real programs, where written blocks are usually also the recently read
ones, should score higher. `tb/mem_model.sv` is a
behavioural main memory with random back-pressure and a 30-cycle read
latency.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/talrw_pkg.sv tb/talrw_l2_tb.sv --top-module talrw_l2_tb -o sim
    ./obj_dir/sim

Replace `talrw_l2_tb` with any other testbench name. The full-size run takes
well under a second.

## Changing it

* **Another cache size.** Set `SETS`, which must be a power of two. The tag
  width follows from it.
* **Other array timing.** Set `READ_LAT` and `WRITE_LAT`, both at least 1.
* **Another write order.** Replace `WRITE_PERM`. The testbenches write the
  order out by hand, so update them too.
* **Another associativity.** This needs a new order with a good minimum
  distance. Change `WAYS` and `WRITE_PERM` together.
