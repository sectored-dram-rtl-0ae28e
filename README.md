# Sectored DRAM in SystemVerilog

A DDR4 row is 8 KiB per chip, but a processor often uses only one or two of
the eight 64-bit words in each 64-byte block that it loads. A conventional
system still activates the whole row across every chip of the rank, and
bursts all eight words across the channel. Sectored DRAM cuts both costs:

* **Sectored activation.** Each row is split into eight *sectors*. A sector
  is one mat-column of the subarray, holding byte *i* of every 64-bit column
  prefetch. A small latch per sector and bank chooses which sectors' local
  wordlines an ACT drives. Activating one sector draws roughly an eighth of
  the power of a full-row ACT. The tFAW power window can therefore admit more
  than four ACTs, as long as the sectors they open fit into the budget of
  four full rows.
* **Variable burst length.** Byte *i* of each chip's prefetch is word *i* of
  the cache block. A READ or WRITE therefore bursts only the beats of the
  open sectors, one beat per word.

Nothing is added to the DDR4 pins. The sector bits travel on address pins
that a single-bank PRECHARGE does not use. The chip and the controller both
take the burst length as the popcount of the bank's sector bits, so it is
never sent.

Word-granular DRAM only helps if the processor asks for the right words.
Two mechanisms pick them:

* **LSQ Lookahead.** Before an access leaves the load/store queue, it
  collects the words that younger queued accesses will touch in the same
  block.
* **Sector Predictor.** This table remembers which words were used during a
  block's last stay in the L1 cache. It adds those words to the next miss
  that comes from the same instruction and word offset.

The L1 cache keeps a valid bit per word. A sectored controller can also be
switched off at run time when the read queue is lightly loaded. It then
behaves like a conventional controller.

This repository contains synthesizable RTL for the digital parts of that
system:

* the DRAM chip's sector latches and variable-burst read and write paths;
* the memory controller's sector-aware bank table, tFAW window and scheduler;
* the processor side: the lookahead queue, the predictor and the sectored L1;
* a top level that wires them into one channel.

Behavioural models of the cell arrays are used to simulate it.

## Block map

```
 core_* ──► lsq_lookahead ──► sector_cache ──┐  (one per core, CORES)
                               └ sector_predictor
                                             ▼
                                  round-robin arbiter
                                             ▼
                       sectored_mem_ctrl (64-entry queue, FR-FCFS)
                        ├ bank_state_table   (open row + sector bits per bank)
                        ├ faw_sector_window  (per rank, 32 sectors / 40 clocks)
                        ├ sector_mode_ctrl   (Always ON / Dynamic)
                        └ popcount8          (burst length)
                                             ▼  DDR4 command bus, 2 beats/clock data bus
                     4 ranks x 8 sectored_dram_chip  (top: sectored_dram_system)
                        ├ sa_sector_ctrl     (sector latches, LWL enables)
                        ├ vbl_read_path      (Read FIFO + MUX + vbl_encoder)
                        └ vbl_write_path     (Write FIFO + vbl_encoder)
                                             ▼  arr_* port
                          cell array (outside the RTL; tb/dram_array_model.sv)
```

`rtl/sdram_pkg.sv` holds the shared pieces:

* the organisation and timing constants;
* the DDR4 command bundle `ddr4_cmd_t`, with its encoders and decoder;
* the address map;
* the cell-array request struct `arr_req_t`;
* the event struct `sys_events_t`.

## Sector bits on the command bus

A single-bank PRE uses only the bank-group and bank pins. This design puts
the eight sector bits on A7..A0 (see `enc_pre`). In each chip,
`sa_sector_ctrl` loads the addressed bank's eight latches on every PRE. An
ACT then enables local wordline *s* only if latch *s* is set. Details:

* The latches reset to all ones, so a chip that never sees sector bits acts
  like plain DDR4.
* PREA (all banks) leaves the latches alone.

To change the sector bits of a bank that is already closed, the controller
sends another PRE to it. Under DDR4 that PRE would be a no-op. Here it only
reloads the latches. The controller's `bank_state_table` keeps the same
eight bits per bank and timestamps for the next legal ACT, CAS and PRE:

* tRCD = 22, tRAS = 56, tRC = 78 and tRP = 22 clocks at DDR4-3200's
  tCK = 0.625 ns;
* tRTP = 12 and tWR = 24, which are assumed common DDR4-3200 values.

## Variable burst length

A RD makes the chip fetch one 64-bit prefetch, one byte per sector. CL = 20
clocks later, `vbl_read_path` puts only the bytes of open sectors on DQ, in
ascending sector order, two beats per clock. A burst of *n* sectors takes
ceil(*n*/2) clocks, and the next burst may start in the following clock.

The beat-to-byte mapping is the 8x3 `vbl_encoder`. It replaces the burst
counter: for beat *k* it gives the index of the *k*-th set sector bit. The
write path uses the same encoder to place incoming beats into the Write
FIFO. When the last beat arrives, the array receives the bytes with a
per-sector mask.

The DDR data bus is modelled as two 8-bit lanes per controller clock.
Neither the serialiser nor the PHY is modelled.

The controller computes the same popcount from its copy of the bank's sector
bits. It uses the count to reserve the data bus, and it counts write-to-read
turnaround (tWTR = 12, assumed) from the end of the real, shortened burst.

## The controller: what a request needs

Requests carry a block address, eight sector bits and, for writes, the data
words. The queue holds 64 of them. Each clock, every entry works out its
next command:

* **CAS.** The bank is open on the right row, and:
  * for a read, the open sectors cover the wanted ones;
  * for a write, the open sectors are exactly the wanted ones.
  A write burst writes every open sector, so anything else would overwrite
  words it does not own.
* **PRE.**
  * The bank is open but misses. If it misses on the *same* row because
    sectors are missing, this is a *re-open*.
  * Or the bank is closed and its latched sector bits differ from the
    request's.
* **ACT.** The bank is closed and already latches the request's sectors.

Scheduling is FR-FCFS:

* The oldest ready CAS goes first. Otherwise the oldest ready PRE or ACT
  goes.
* Only the oldest request of a bank may change the bank's state.
* A request waits while an older request to the same block is queued. This
  keeps program order for write-backs and refetches.
* A CAS uses auto-precharge when no other queued request still hits the row:
  open-page with close on last use.

An ACT must also pass its rank's `faw_sector_window`:

* The sectors activated in the last 40 clocks, plus this ACT's sectors, may
  not exceed 32, the sectors of four full rows.
* tRRD_S = 4 and tRRD_L = 8 still apply between any two ACTs.

So ten single-sector ACTs fit where four full-row ACTs did. Eight full-row
ACTs still need two windows.

`sector_mode_ctrl` implements the Dynamic mode:

* It averages the number of reads queued over 1000 clocks.
* It keeps sectored operation on for the next 1000 clocks only if that
  average exceeds 30.
* When it is off, reads ask for all eight sectors.

The default is Always ON (`DYNAMIC = 0`).

## Processor side

`lsq_lookahead` is an in-order queue of 128 loads and stores. When an access
enters, it sets its word's bit in every older queued entry of the same
block. The entry at the head then reaches the cache already asking for the
words its successors will want.

`sector_cache` is a 32 KiB, 8-way L1 with 64-byte blocks. Each block has
three bit fields:

* a valid bit per word (the *sector bits*);
* a dirty bit per word;
* a *used* bit per word.

It behaves as follows:

* A request whose words are all present hits.
* A request whose tag matches but lacks words is a *sector miss*. It fetches
  the missing words.
* A tag miss allocates a block.
* Both kinds of miss add the predictor's words to the fetch.
* An evicted block writes back only its dirty words, as a sectored write.

`sector_predictor` is a 512 x 8-bit table. Its index is
PC[8:0] ^ PC[17:9] ^ word offset, stored with the block at allocation. The
table is written with the block's used bits when the block is evicted.

The top, `sectored_dram_system`, gives each of `CORES` cores an LSQ and an
L1. A round-robin arbiter feeds the controller. Read responses are broadcast,
and each cache takes the one for its outstanding block.

## Where this departs from the evaluated system

* **Caches.** There is no L2 or L3: each L1 talks to the controller. The
  caches are not coherent across cores. Each cache has one outstanding miss,
  instead of eight MSHRs per core.
* **Channels and scheduling.** There is one channel. FR-FCFS has no cap on
  row-hit streaks.
* **DDR4 features left out.**
  * Refresh is not modelled.
  * Neither are tCCD, rank-to-rank and read-to-write turnaround, or burst
    chop.
  * The mode registers, ODT, DLL and ZQ are not modelled either.
* **Assumed values.** CWL, tRTP, tWR and tWTR are not given in the source
  evaluation, so common DDR4-3200 values are used.
* **Design choices of this RTL.** None of the following is specified:
  * the choice of A7..A0 for sector bits;
  * the ascending beat order;
  * the predictor's hash bit fields;
  * cache associativity and replacement;
  * the handshakes.
* **Outside the RTL.** The DRAM cell array (mats, sense amplifiers, local
  wordline drivers), the DDR4 PHY and pads, and the processor cores are not
  logic that can be written here. The array sits behind the `arr_*` ports,
  and the core's load/store stream enters on `core_*`.

## Interfaces and timing of the top

* `core_valid/ready/addr/pc/store/wdata` (per core). These push one access.
  `load_valid/load_data` return the word of each access in program order. A
  store returns the stored word.
* `arr_req[rank][chip]` / `arr_rdata[rank][chip]`. Each chip drives its
  array's ACT (with per-sector local wordline enables), PRE, RD and
  completed WR, and reads `arr_rdata` in the clock of the RD.
* `sectored_on` reports the mode. `ev` pulses once per event. Events cover:
  * lookahead merges;
  * hits, sector misses, cache misses and write-backs;
  * predictor widening;
  * PREs to closed banks and re-opens;
  * partial ACTs;
  * more than four ACTs in a window, and ACTs held by the sector budget;
  * auto-precharges.

All logic is on one clock, the DDR4 command clock. Reset is asynchronous and
active low.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. Each has a watchdog
and uses only `$urandom`. Build one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sdram_pkg.sv tb/dram_tb_pkg.sv \
  tb/tb_sectored_mem_ctrl.sv --top-module tb_sectored_mem_ctrl -Mdir obj -o sim
obj/sim
```

Each block has its own testbench (`tb/tb_<block>.sv`). They check results
against independently computed values and check the paper's latencies
cycle by cycle:

* BL8 takes four clocks and a single sector one;
* the fifth full-row ACT goes exactly 40 clocks after the first;
* tRCD, tRAS, tRC and tRP are exact;
* read data appears CL clocks and write data is taken CWL clocks after the
  command.

`tb_sectored_mem_ctrl` runs the controller against 4 x 8 chips and array
models. It has a protocol checker for every timing rule above and a
reference memory.

End to end:

* `tb_sectored_dram_system` runs eight cores at reduced cache and queue
  sizes, with a 200-clock Dynamic window. It fails if any of the 14
  mechanisms never happens.
* `tb_sectored_dram_system_full` runs the top with every parameter at its
  default: one core, 32 KiB L1, 128-entry lookahead, 512-entry predictor,
  64-entry queue, four ranks. It makes 6000 accesses with misses, evictions
  and write-backs, and checks every returned word. In the test run, 43 % of
  the row cells a conventional system would activate were activated.

`tb/dram_array_model.sv` is the behavioural cell array. Its contents are a
hash of the address, and it flags any access to a closed bank or sector.
