# Quick Replay Recovery (QRR) for L2 cache banks and memory controllers

Soft errors in the flip-flops of a chip's memory-side "uncore" (the shared L2 cache
controllers and the DRAM controllers) are hard to recover from with ordinary
checkpointing: an error can sit in a cache line for millions of cycles before a core
reads it, so a rollback would have to go back hundreds of millions of cycles. Quick
Replay Recovery takes a local approach instead. The flip-flops of the L2 cache bank (L2C)
and of its DRAM controller (MCU) are covered by logic parity, so an upset is seen within
a cycle or two. In front of each L2C bank sits a small controller that keeps a copy of
every request packet the bank has accepted but not finished. When a parity error
appears, the controller:

1. stops the error from leaving the component: writes into the L2 tag/data arrays and
   DRAM are disabled, and the valid bits of returns toward the cores are held low;
2. resets every flip-flop of L2C and MCU (the SRAM and DRAM arrays keep their contents);
3. resends the recorded packets to L2C in the order they first arrived;
4. lets new requests in again.

Re-executing unfinished requests in their original order gives the same result, so the
cores see nothing but a pause of a few thousand cycles at most. This repository gives
synthesizable SystemVerilog for the controller, for one bank and for a chip with eight
banks and four MCUs, in the OpenSPARC T2 configuration. The L2C and MCU themselves are
not included: their signals are ports, and the testbenches use a small behavioural
model in their place.

## Structure

```
 cores --req--> request_monitor --record--> record_table (32 x {order, packet})
                      |                        |        ^
                      v                        | packets| delete
                    MUX <-- replay -- replay_controller |
                      |                  |  write disable, reset
                      v                  v              |
                     L2C (+ miss buffer) + MCU          |
                      |  returns, store-miss completion |
                      v                                 |
 cores <--rtn-- completion_monitor ---------------------+
 L2C/MCU parity errors --> error_aggregator --> replay_controller
 (blocking of core requests: table full, error contained, recovery running)
```

| File | Module | Role |
|---|---|---|
| `rtl/qrr_pkg.sv` | package | packet structs, request/return type codes, FSM and entry-state enums |
| `rtl/logic_parity_group.sv` | `logic_parity_group` | a register group with predicted parity and a checker; the protection QRR relies on inside L2C/MCU |
| `rtl/error_aggregator.sv` | `error_aggregator` | ORs all parity error lines: an immediate copy and a two-cycle registered copy |
| `rtl/record_table.sv` | `record_table` | 32 entries of packet + arrival rank + bookkeeping |
| `rtl/request_monitor.sv` | `request_monitor` | admits core packets, records them, blocks when full / containing / recovering |
| `rtl/completion_monitor.sv` | `completion_monitor` | matches returns and store-miss completions to entries, deletes them, gates returns |
| `rtl/replay_controller.sv` | `replay_controller` | the recovery state machine and the in-order replay |
| `rtl/qrr_bank.sv` | `qrr_bank` | QRR for one bank: the blocks above plus the request mux |
| `rtl/qrr_top.sv` | `qrr_top` | eight banks, four MCUs, MCU error fan-out and MCU reset / write-disable |

## Keeping the order: the record table

The controller must replay in arrival order, yet requests finish out of order (a hit
overtakes an earlier miss). The table therefore does not keep a FIFO. Each valid entry
carries its *rank* among the unfinished requests: 0 is the oldest. A new request gets
rank = number of valid entries and goes into the lowest free slot. When entries are
deleted, every younger entry's rank drops by the number of deleted entries older than
it, so the valid ranks always form 0..count-1 without gaps. Two deletions in one cycle
(a return and a store-miss completion) are handled together.

Beside the packet, each entry keeps: whether it waits for a return or for the miss
buffer, whether a return for it has already reached the cores, whether it has been
replayed in the current recovery, a copy of the requester id (core and thread) and
whether it is a store. These flags are what the monitors and the replay controller look
at; the packet itself is only read when it is replayed.

The table is not parity protected. The controller's flip-flops are meant to be
radiation-hardened cells, and with one upset at a time an error in L2C cannot also hit
the table.

## When is a request finished?

A request is finished when its return packet goes to the cores, with one exception: a
store that misses in L2. L2C acknowledges such a store at once but keeps working on it,
fetching the line and merging the data in its miss buffer, possibly for hundreds of
cycles. The core has already forgotten the store, so if L2C were reset in that window
the store would be lost. The entry therefore stays in the table, now waiting for the
miss buffer's completion signal, and is deleted only then.

Return packets carry no tag that points back at a request, so the completion monitor
matches a return to the oldest entry of the same requester and the same kind (load or
store) that is still waiting for a return. Per requester and kind, L2C answers in order,
so the oldest match is the right one. L2C flags a store-miss acknowledgement with a
sideband bit (`l2c_rtn_post`); the miss buffer's completion gives the requester id and
deletes the oldest entry of that requester waiting for it.

## The recovery sequence and its timing

```
cycle      e      e+1    e+2    e+3      e+4 .. e+7   e+8 ..
err_fast   1      (parity error visible, may vanish a cycle later)
err_agg                  1      (two registered OR levels)
state      NORMAL NORMAL NORMAL DISABLE  RESET x4     REPLAY ... NORMAL
contain    1      1      1      1        1            0
uncore_rst                               1
replay                                                rank 0, rank 1, ...
```

* **Containment starts in the error cycle.** The registered, aggregated error arrives
  two cycles late, and in those cycles a corrupted flip-flop could already write an
  array or send a valid return. The unregistered OR of all error lines (`err_fast`)
  therefore drives write-disable, the return gate and request blocking at once, and a
  sticky copy holds them until the reset begins; the DISABLE and RESET states keep them up after that (`contain`). The hold matters: a
  corrupted group may be overwritten a cycle later, the error line drops, and the store
  whose write was just suppressed would otherwise be acknowledged normally.
* **DISABLE (1 cycle).** All entries go back to "waiting for a return" and lose their
  replayed marks.
* **RESET (`RST_CYCLES` = 4 cycles).** `uncore_rst` clears L2C and MCU; the aggregator
  is flushed so that the old error does not start a second recovery.
* **REPLAY.** The next packet is the entry whose rank equals the number of entries
  already replayed, offered through the request mux to L2C one per cycle as L2C accepts
  them. Requests that complete during the replay are deleted as usual, which the rank
  rule handles because ranks and replayed counts shrink together. When no unreplayed
  entry is left the controller returns to NORMAL and the cores are let in again.
* **An error during replay** starts the whole sequence again with all entries.

The controller itself adds 1 + 4 + 32 + 1 = 38 cycles at most with a full table (the
last replay cycle finds nothing left); the rest of a recovery is L2C serving the
replayed requests. In the worst case every one of the 32 replayed packets is a load that
misses in L2. With a 140-cycle DRAM access and misses served one after another, the
whole recovery then takes 4,523 cycles from the upset to the last return
(`qrr_worst_recovery_tb`). That stays below the 5,000 cycles reported for the original
implementation. The random testbenches check every recovery against the same bound.

## Duplicate returns

A replayed request may already have answered the core before the error (a store miss
is the usual case: acknowledged, then waiting for the miss buffer). Replaying it makes
L2C answer again. The cores no longer expect that answer, so the completion monitor
drops a return whose matched entry has already returned once, and passes it on only
for entries that have not.

## Two banks per MCU

Each MCU serves two L2C banks (MCU m: banks 2m and 2m+1), and it only receives work
through them. An MCU parity error is therefore sent to both banks' controllers, which
recover together. The MCU is reset only while both banks hold their reset, so that no
request of either bank is lost from the MCU without being replayed. DRAM writes are
disabled on an MCU error at once, and while both banks are containing.

## Interfaces

All signals are synchronous to one clock; `rst` is synchronous and active high.

* Core requests and L2C requests: valid/ready; a transfer happens when both are high.
  `core_req_ready` is low while the table is full, an error is being contained, or a
  recovery is running.
* Returns from L2C and store-miss completions: one-cycle valid pulses, no back-pressure.
* Packets: a request is 130 bits (type, core, thread, misc, 40-bit address, 64-bit
  data); a return is 146 bits (type, core, thread, misc, 128-bit data). These are the
  OpenSPARC T2 packet widths; the field layout is simplified.
* `uncore_rst`, `write_disable` (per bank) and `mcu_rst`, `mcu_write_disable` (per MCU)
  go to the protected components. `l2c_parity_err` and `mcu_parity_err` come from their
  parity checkers.
* `qrr_state`, `table_count` and `ev_*` pulses are status outputs.

`qrr_top` default parameters: `NBANKS = 8`, `DEPTH = 32`, `N_L2C_ERR = 64`,
`N_MCU_ERR = 16`, `ERR_GROUP = 8`, `RST_CYCLES = 4`.

## Where this design follows the original and where it chooses

Follows: QRR per L2C bank with a 32-entry table of order and packet; recording at
acceptance; deletion on return, and on miss-buffer completion for store misses; the
disable, reset, replay-in-order, resume sequence; blocking new requests during
recovery; immediate error lines to disable writes and valids; MCU errors recovering both
banks of the pair; eight banks and four MCUs; logic parity as the detection scheme; an
unprotected table.

Own choices (nothing in the description fixes them): the valid/ready handshakes (the
real chip uses credits); matching returns by requester and kind; the store-miss
sideband bit and the requester id on the miss completion; dropping duplicate returns;
holding containment until reset; restarting on an error during replay; one disable
cycle and a 4-cycle reset; the two-level OR aggregation and the counts of error lines;
the AND rule for the MCU reset; 32-bit parity groups.

Known gaps:

* The original controller has 812 flip-flops per instance; this one has 528
  flip-flop bits plus a 32 x 130-bit packet memory. What the 812 count includes is not
  known, so the two cannot be compared.
* The real L2C, MCU, miss buffer and parity placement are not included. Which
  flip-flops get parity, which are hardened, and which configuration flip-flops are kept
  out of the reset all belong to those components.
* The error-containment wiring is the generic "all lines disable everything" form,
  not a per-path selection.

## Testbenches and simulation

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line and has a cycle watchdog:

* `logic_parity_group_tb`, `error_aggregator_tb`, `record_table_tb`,
  `request_monitor_tb`, `completion_monitor_tb`, `replay_controller_tb`: unit tests
  against reference models written separately in the testbench. For example, the
  record-table test keeps a list in arrival order and checks every entry's rank each
  cycle. The replay-controller test checks the length of every recovery in cycles.
* `qrr_bank_tb`: one bank at its default sizes with `bank_driver` (64 requester
  threads, loads and stores on private words, random parity upsets in L2C and MCU
  register groups, including during a replay) and `l2c_mcu_model` (input queue, hits
  and misses, a miss buffer that finishes store misses late, evictions, and every
  flip-flop in a parity group). It checks every load value, that no request is answered
  twice or unasked, that memory is right at the end, that the table drains, and that
  each recovery is shorter than 5,000 cycles. It also counts each mechanism and fails
  if any never happened: recovery, restart, replay, duplicate drop, store-miss
  deletion, table full, blocking by recovery, MCU-side error.
* `qrr_worst_recovery_tb`: one bank at default sizes, all 32 entries holding load
  misses when an upset hits. It checks the exact cycle at which the replay starts, one
  replayed packet per cycle in arrival order, the data of every load, and the total
  recovery time against 5,000 cycles.
* `qrr_top_tb`: the full chip (`qrr_top` with no parameter overrides), one driver and
  model per bank, 10,000 requests per bank. MCU errors reach both banks of the pair. It
  also counts joint recoveries of bank pairs and MCU resets.

With Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module qrr_top_tb \
  rtl/qrr_pkg.sv rtl/logic_parity_group.sv rtl/error_aggregator.sv rtl/record_table.sv \
  rtl/request_monitor.sv rtl/completion_monitor.sv rtl/replay_controller.sv \
  rtl/qrr_bank.sv rtl/qrr_top.sv tb/l2c_mcu_model.sv tb/bank_driver.sv tb/qrr_top_tb.sv
./obj_dir/Vqrr_top_tb
```

For a unit test, list `rtl/qrr_pkg.sv`, the module and its testbench (add
`logic_parity_group.sv` for the model-based tests). The full-chip test builds in about
a minute and runs in seconds. To scale the design, change `DEPTH` (table size),
`NBANKS` (must be even) or `RST_CYCLES`. The record table and the replay controller use
`$clog2(DEPTH)`-bit indices, and ranks are compared in parallel across all entries.
