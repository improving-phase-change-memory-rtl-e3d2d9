# DATACON: a PCM memory controller that writes over known content

In phase-change memory a cell holds a bit as the phase of a small volume of
chalcogenide glass. A SET pulse (long, moderate current) crystallises it and
stores a 1; a RESET pulse (short, high current) makes it amorphous and stores a
0. Because a write driver does not know what a line holds, a conventional PCM
write of a whole line reads and compares the old content, applies SET pulses
where needed, compares again and applies RESET pulses: it pays for both pulse
types plus the comparisons.

If the controller knew that the line it is about to overwrite holds only 0s,
the write would need only SET pulses; if it held only 1s, only RESET pulses.
Both are shorter than the general write (in the timing used here, 150 ns and
40 ns against 190 ns of write recovery), and the SET-only write also avoids
the high RESET current. This controller exploits that. For every write it

1. counts the 1s ("SET bits") in the 1 KB line being written,
2. picks a free physical line that is already all-0s or all-1s, whichever
   suits the data,
3. sends the write there with the matching short timing, and records the new
   logical-to-physical translation, and
4. puts the physical line the logical address used to occupy into a queue of
   lines to be re-initialised to all-0s or all-1s later, when the memory is
   otherwise idle.

The rest of this document explains how each of those steps is built, in the
order a write passes through them, and then how to simulate and change the
RTL. All of it is synthesizable SystemVerilog under `rtl/`; `tb/` holds
self-checking testbenches and behavioural models of the PCM rank and of the
in-memory translation table.

## One controller per rank

The reference system is a 128 GB PCM main memory behind a 64 MB eDRAM cache:
4 channels, 4 ranks per channel, 8 banks per rank, 8 partitions per bank. The
eDRAM cache works with 1 KB lines, so the PCM sees 1 KB reads (cache misses)
and 1 KB writes (evictions). A rank of 8 GB holds 2^23 such lines, so
`datacon_mc` works on 23-bit line addresses, and one instance serves one
rank. The memory partition of a line is taken as the top 3 bits of its
physical line address.

```
   eDRAM side                         datacon_mc
   ----------      +-----------+    +------------+    +-----------------+
   rd_req_* ------>| read queue|--->|            |    | overwritten     |
                   +-----------+    |            |--->| content         |
   wr_req_* ------>|write queue|--->|  request   |    | selection (OCS) |
                   +-----------+    |  FSM       |<---+-----------------+
                                    |            |<-->| LUT  (2 x 4096  |<--> at_*  (translation
   rd_rsp_* <-----------------------|            |    |  entries, LRU)  |           table in PCM)
                                    |            |<-->| status unit:    |
                                    |            |    | ResetQ, SetQ    |
                                    +-----+------+    +--------^--------+
                                          |  freed line        | re-initialised line
                                          v                    |
                                    +------------+      +------+-------+
                                    | InitQ (8)  |----->| re-init      |---> init_cmd_*
                                    +------------+      | scheduler    |
                                                        +--------------+
                                    +------------+
                 request FSM ------>| command    |---> pcm_cmd_*  (ACT, RD/WR, PRE)
                                    | sequencer  |
                                    +------------+
```

## PCM command timing

Every access is an ACT, then a READ or WRITE, then a PRE. The only thing that
changes between write kinds is the write recovery time between the end of the
data burst and the PRE. The timing table in nanoseconds is converted to
cycles of the 1066 MHz memory clock (0.9375 ns), rounded to the nearest
cycle:

| access                    | tRCD | tBURST | tWR / tRAS | tRP | total (tRC) |
|---------------------------|------|--------|------------|-----|-------------|
| read                      | 4    | –      | tRAS 59    | 1   | 60 (56 ns)  |
| write over unknown content| 4    | 16     | 203        | 1   | 224 (210 ns)|
| write over all-0s (SET)   | 4    | 16     | 160        | 1   | 181 (170 ns)|
| write over all-1s (RESET) | 4    | 16     | 43         | 1   | 64 (60 ns)  |

Re-initialising a line to all-0s uses the RESET write timing (every cell gets
a RESET pulse). Re-initialising to all-1s uses the SET timing.

One number in the source timing table was not used. It gives 75 ns as the
tRCD of the general write, but also a total of 209.75 ns for that write, which
works out only with the 3.75 ns tRCD of every other row. The quoted latency
savings (71.5 % for RESET-only, 19 % for SET-only) also fit only 209.75 ns. The
RTL therefore uses 4 cycles of tRCD for every access. All values are parameters
of `dc_pcm_seq` and of the top, so another table can be dropped in.

`dc_pcm_seq` is a counter. For an access started at cycle 0 it emits ACT in
cycle 1, READ/WRITE at cycle 1 + tRCD, and PRE at cycle 1 + tRAS for a read
or 1 + tRCD + tBURST + tWR for a write. It raises `done_o` in the last tRP
cycle, and it accepts the next start in that same cycle.

## Choosing what to overwrite

`dc_ocs` is combinational. It counts the SET bits of the 8192-bit write data
in 64-bit chunks, then adds the chunk counts. It compares the count against
60 % of the line (`count*100 > 8192*60`, so exactly 60 % counts as "not more").

* **More than 60 % 1s:** the data has few 0s, so a RESET-only write is short
  and cheap. The unit prefers an all-1s line, then an all-0s line, then the
  line's own (unknown) content.
* **60 % or fewer 1s:** SET pulses are needed for a minority of cells, and a
  SET-only write saves the RESET energy. The unit prefers an all-0s line,
  then an all-1s line, then unknown content.

`policy_i` selects two fixed modes of operation:

* `1`: always all-1s. This mode suits memory that encrypts data inside the
  chip, where the controller cannot see the final bit pattern.
* `2`: always all-0s.

Both modes fall back to unknown content when their queue is empty.

## The pool of known-content lines

### Address status unit

`dc_status_unit` holds two 32-entry FIFOs of physical line addresses:

* ResetQ holds lines known to be all-0s.
* SetQ holds lines known to be all-1s.

A write that is redirected takes the head of the chosen queue. The unit
raises `need_init_o` when either queue holds fewer than `TH_INIT` = 16 lines.

### InitQ and re-initialisation

When a write moves logical line L from physical line P to a fresh line P',
P becomes garbage. P goes into InitQ, an 8-entry FIFO in `dc_reinit_sched`.
Each entry carries one extra bit, the pattern P should be given. The bit is
chosen on entry: the pattern whose status queue, counting the lines already
pending for it, is the emptier of the two. If at issue time that queue has
filled up, the other pattern is used (counted in `stats_o.init_flips`).

A re-initialisation is a full-line write of the pattern. It has its own
command sequencer and its own command port (`init_cmd_*`). That way it can
run in one partition while a read is served in another. It starts only when
all of the following hold:

* InitQ is not empty.
* A refill is wanted: a status queue is below the threshold, or InitQ is
  full.
* The access is off the critical path. Either both request queues are empty
  and no read is in service in the same partition, or the write queue is
  empty and the read being served is in a *different* partition. In both
  cases no write is in service.
* The sequencer is free.
* At least one of the two status queues has room.

When it finishes, the line enters ResetQ or SetQ.

The "InitQ is full" trigger is this design's addition. Without it the pool
can deadlock: if both status queues sit at or above 16 while InitQ is full,
nothing ever starts a re-initialisation, and no write can be redirected,
because a redirect must free a line into InitQ. The top therefore redirects a
write only when InitQ has room. Otherwise the write goes to its current
physical line as a general write.

### Starting the pool

After reset no line is known to be all-0s or all-1s. The top `SPARE_LINES`
= 64 physical lines are excluded from the logical space. A small seeder
pushes them into InitQ after reset, as InitQ space allows. The re-init engine
then turns them into the first ResetQ/SetQ entries. At full size this takes
about 60 re-initialisations, about 8 000 cycles, before the first write can be
redirected. Writes that arrive earlier are still served, as general writes.

### Behaviour under write bursts

Re-initialisation never competes with writes: it waits until the write queue
is empty. During a long burst of evictions the pool drains:

1. Up to 8 writes are redirected until InitQ is full.
2. Every further write in the burst is a general write, until the queues go
   quiet.

This follows from the scheduling rule and the queue sizes. The end-to-end
test shows it, and `stats_o.no_initq_room` counts it. Larger `INITQ_DEPTH` or
`SU_DEPTH` values stretch the burst that can be absorbed.

## Address translation: AT and LUT

Redirecting writes means a logical line no longer sits at the physical line
of the same number, so every access must be translated.

* **AT.** The full table (one entry per line, 2^23 entries) lives in the PCM
  itself. The controller reaches it through the `at_*` port. Requests carry a
  word index and read data returns in order, so any memory or partition
  model can sit behind it.
* **Entry format** (32 bits): bit 31 = "mapped", bits 22:0 = physical line.
  An entry with bit 31 clear means the identity mapping. A table that is all
  zeros after power-up is therefore a valid starting state.
* **LUT.** `dc_lut` caches the entries of the two most recently used *LUT
  partitions*. A LUT partition is 4096 consecutive logical lines: the two
  partitions, at 4 bytes per entry, make the 32 KB the design budgets for
  the LUT. The upper 11 logical address bits form the tag.
* **Hit.** The old entry is returned two cycles after the request is accepted.
  An update writes the new entry and marks the partition dirty.
* **Miss.** The least recently used partition is the victim.
  1. If the victim is dirty, its 4096 entries are streamed to the AT (one
     write every 2 cycles).
  2. The 4096 entries of the wanted partition are streamed in from the AT
     (one request per cycle while the AT accepts, responses in order).
  3. The request is answered.

  A miss therefore costs about 4 100 cycles with a clean victim and about
  12 300 with a dirty one, plus the AT latency.
  The design relies on accesses clustering in a few partitions for this cost
  to be rare.

The LUT memory is 2 × 4096 × 32 bits, synthesised as a memory; the
full-size top shows 395 616 memory bits including the request queues.

A *memory* partition of the real rank (one eighth of a bank) holds far more
than 4096 lines, and its entries would not fit in 16 KB. The LUT partition is
therefore a unit of the logical address space sized to the 32 KB budget. It
is not the physical partition. This is the main interpretation this RTL makes.

## The request path in `datacon_mc`

One request is in service at a time. Its states are:

| state               | what happens |
|---------------------|--------------|
| `M_IDLE`            | picks the oldest read, or the oldest write when the write queue is full or no read waits |
| `M_LOOKUP`/`M_LWAIT`| LUT lookup, including any miss handling |
| `M_DECIDE`          | for a write: the OCS result, the status-queue heads and InitQ room decide between redirect and general write |
| `M_UPDATE`/`M_UWAIT`| on a redirect: takes the status queue head, frees the old physical line into InitQ, writes `{1, new line}` into the LUT |
| `M_ISSUE`/`M_WAIT`  | starts the PCM access with the matching command timing |

* **Partition conflicts.** An access waits if the re-init engine is busy in
  the same partition.
* **Reads** return data on `rd_rsp_*`, in request order.
* **Ordering.** Reads and writes to the same logical line are not ordered
  across the two queues. The eDRAM cache is expected not to fetch a line
  whose eviction is still queued.

`stats_o` (`dc_stats_t` in `dc_pkg`) counts:

* reads;
* writes over all-0s, over all-1s and over unknown content;
* fallbacks for a full InitQ;
* LUT hits, misses and write-backs;
* re-initialisations, those overlapping a read, and pattern switches;
* dense writes and total SET bits written, from which a write-energy
  estimate can be made;
* the occupancy of the read queue, the write queue and InitQ, summed over
  cycles (divide by the cycle count for the mean queue length).

`idle_o` is high when nothing is queued or in flight.

## Files

| file | content |
|------|---------|
| `rtl/dc_pkg.sv` | enums for content kind, PCM command and access type; default sizes and timings; statistics struct |
| `rtl/dc_fifo.sv` | first-word-fall-through FIFO (request queues, ResetQ/SetQ, InitQ) |
| `rtl/dc_ocs.sv` | SET-bit count and overwritten-content selection |
| `rtl/dc_status_unit.sv` | ResetQ and SetQ with the refill threshold |
| `rtl/dc_pcm_seq.sv` | ACT / RD-WR / PRE sequencer with per-kind timing |
| `rtl/dc_reinit_sched.sv` | InitQ, pattern choice, re-init scheduling and its sequencer |
| `rtl/dc_lut.sv` | translation cache, LRU, dirty write-back and fill |
| `rtl/datacon_mc.sv` | top: the request path, seeder, statistics |
| `tb/pcm_model.sv` | behavioural PCM rank (see below) |
| `tb/at_model.sv` | behavioural translation table with random back-pressure and fixed latency |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the end-to-end and full-size tests |

The PCM model:

* stores line contents, with a fixed pseudo-random pattern before the first
  write;
* checks the spacing of every command against the timing table;
* reports a SET-only write to a line that is not all-0s, or a RESET-only
  write to a line that is not all-1s;
* reports the two command ports touching the same partition at once.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself. It
also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/dc_pkg.sv tb/tb_datacon_mc.sv --top-module tb_datacon_mc -o sim
./obj_dir/sim
```

| testbench | what it does |
|-----------|--------------|
| `tb_dc_fifo`, `tb_dc_ocs`, `tb_dc_status_unit`, `tb_dc_pcm_seq`, `tb_dc_reinit_sched`, `tb_dc_lut` | drive each unit with random stimulus against a reference model; the sequencer test checks every command cycle exactly |
| `tb_datacon_mc` | end to end at reduced width (64-bit lines, 1024 physical lines, 16-entry LUT partitions; queue sizes, threshold and timing at their defaults) |
| `tb_datacon_full` | every parameter at its default (1 KB lines, 23-bit addresses, 4096-entry LUT partitions); runs in well under a minute |

`tb_datacon_mc` runs about 2 600 random reads and writes in phases:

* mixed traffic;
* write bursts;
* read-heavy traffic;
* each fixed policy.

It checks every read's data and the PCM model's rules. It also checks that no
spare line is lost. It requires each mechanism to occur at least once:

* all three write kinds;
* the InitQ-full fallback;
* LUT misses and dirty write-backs;
* re-initialisation with idle queues and during a read in another partition;
* a full write queue.

`tb_datacon_full` runs these steps:

1. Waits for the spare lines to be initialised.
2. Writes a 10 %-dense line and checks that it goes SET-only with the
   SET timing.
3. Writes a 90 %-dense line and checks that it goes RESET-only with the
   RESET timing.
4. Reads both back.
5. Touches three LUT partitions, forcing an eviction with a full
   4096-entry write-back.
6. Reads everything again.

To experiment, override the top's parameters, for example:

* `INITQ_DEPTH`, `SU_DEPTH`, `TH_INIT` and `THRESH_PCT` for the pool and
  selection;
* `LUT_SLOTS` for 4 or 8 cached partitions;
* the `T_*` timings.

## Where this RTL goes beyond the source description

These points are not specified by the design description and are choices of
this implementation:

* the read-first arbitration;
* the InitQ-full trigger;
* the spare-line pool and seeder;
* the identity-mapping bit in translation entries;
* one InitQ for the rank (the description has one per bank, but a 1 KB line
  spans all 8 banks, so they would hold the same addresses);
* the re-init timings;
* one request at a time;
* the interfaces.

Not built:

* the PCM arrays and write drivers;
* the eDRAM cache;
* the processor;
* the storage of the AT inside PCM.

These appear as ports, and as models in `tb/`.
