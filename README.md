# COSM memory channel: CPU and processing-in-memory sharing one LPDDR5 channel

A phone that runs a language model inside its DRAM (processing-in-memory, PIM)
still needs that same DRAM for everything else the CPU does. Bank-level PIM
units stream whole rows through a compute unit next to each bank. While they
do, the bank and the command bus are busy, and a CPU load waiting for that
bank stalls. The usual fixes are to give PIM a bank for a long stretch, or to
send it fine-grained commands. Both hurt: the first makes CPU latency explode,
the second floods the command bus.

This design splits control between the memory controller and the device.
Three ideas make that work:

1. **Long, preemptable PIM commands.** One command makes a bank process
   `nPTL` = 128 cycles of columns on its own. The controller can stop it
   between two columns with `PIM_Pause` and later continue it by sending the
   same command again. The device reports nothing back. Because progress is
   one column every tCCD, the controller knows exactly how far the bank got
   from the cycle count alone.
2. **Bus-decoupled data staging.** Moving data between the host and a bank
   takes two steps. `PIM_WrBuf`/`PIM_RdBuf` move one bus burst between the
   host and a 1 kB buffer beside the bank, with no address and no open row.
   `PIM_LdBuf`/`PIM_StBuf` move the buffer to or from the bank array with the
   same preemptable 128-cycle engine. The bus part can then use idle bus
   slots, and the bank part can use idle bank time.
3. **Idleness-aware scheduling.** The controller predicts, for every bank,
   how many cycles remain until the next CPU access needs it. It does this by
   replaying the CPU scheduler's order over the oldest queued request of each
   bank. It also predicts when the data bus is next needed. PIM work is placed
   only into windows that fit it. A running PIM command is paused at the last
   cycle that still lets the CPU access go out on time.

The RTL is one memory channel: the controller, plus the per-bank PIM control
logic in the device. Its default sizes are those of the evaluated system: one
of the two LPDDR5-6400 channels, with 2 ranks of 16 banks each, 128-cycle PIM
commands, a 1 kB buffer per bank, and PIM queues two entries deep per bank.

## Where everything sits

```
 CPU requests ─► mem_queue ─┬─► frfcfs_sched ───────────┐
                            │                            ▼
 refresh_ctrl ──────────────┤                     cmd_arbiter ──► C/A bus ──► pim_bank ×32
                            └─► iwe ─► windows ──►  ▲   ▲           (ca)      (pee + pim_buffer)
 PIM stream ─► pim_cmd_queue ─► pim_scheduler ──────┘   │                        │
                                                        │                 arr_* (DRAM array)
 bank_tracker ◄── every issued command ─────────────────┘                 pu_*  (PIM unit)
```

Each clock cycle the controller does four things:

1. The queues hold CPU requests, PIM execution commands (PEQ) and PIM
   transfer commands (PRWQ).
2. The IWE turns the CPU queue into bank and bus idle windows.
3. The FR-FCFS scheduler and the PIM scheduler each propose one command.
4. The arbiter picks one command and drives it.

All of this is combinational between registers, so there is one command per
cycle.

| module | role |
|---|---|
| `cosm_pkg` | sizes, timings in cycles, command and request types |
| `mem_queue` | CPU request queue in arrival order; the oldest request per bank |
| `refresh_ctrl` | per-rank refresh request every tREFI, ranks staggered |
| `bank_tracker` | open row and timing counters of every bank, data-bus spacing |
| `frfcfs_sched` | first-ready / first-come CPU picker, plus refresh |
| `iwe` | idle window estimator |
| `pim_cmd_queue` | PEQ and PRWQ of every bank, `PIM_Barrier` |
| `pim_scheduler` | PIM picker: transfers, then buffer loads and stores, then execution |
| `cmd_arbiter` | pause > CPU/refresh > PIM; infers PIM progress per bank |
| `pee` | PIM Execution Engine of one bank |
| `pim_buffer` | 1 kB staging buffer of one bank |
| `pim_bank` | one bank's device logic: decode, PEE, buffer, column routing |
| `cosm_top` | the channel: everything above wired together |

Three parts stay outside as ports:

- the DRAM cell arrays (`arr_*`, one column port per bank);
- the PIM compute units (`pu_*`);
- the hosts of the two command streams.

The PIM core is an existing LPDDR5-PIM design, and the arrays are DRAM
macros, so neither is part of this RTL.

## Timing base

Everything counts in command-clock cycles of 1.25 ns (LPDDR5-6400). Each
nanosecond figure is rounded up:

| tBL | tRCD | tRP | tRAS | tRRD | tRFC | tWR | tRTP | tREFI | tCCD |
|---|---|---|---|---|---|---|---|---|---|
| 2 | 4 | 4 | 9 | 2 | 70 | 8 | 2 | 774 | 2 (assumed) |

Some choices here are this design's own:

- tCCD is not in the source timing table; one burst slot (2 cycles) is used.
- tCL, tWTR and rank-switch penalties are not modelled. Bursts are only kept
  tBL apart.
- A 128-cycle PIM command therefore covers 64 columns of 16 B. That is
  1 kB, which is why the buffer is 1 kB: it holds exactly one
  `PIM_LdBuf`/`PIM_StBuf` worth of data.

PIM-specific rules, all enforced by `bank_tracker` and `cmd_arbiter`:

- ACT → PIM command: tRCD, the same as for a read or write.
- PIM command → `PIM_Pause`: at least tCCD.
- `PIM_Pause` (or the natural end) → PRE: tRTP for a load-only command, and
  tCCD + tWR when the command stores into the array.
- Buffer transfers: tBL apart.

## The preemptable PIM command (pee, cmd_arbiter)

The engine holds three registers:

- the command kind (CR);
- the current column, CSC, which is "invalid" when idle;
- the count of columns done, PC.

A command seen in cycle *s* loads CSC with the start column and PC with 0.
The engine then issues a column in cycles *s*+1, *s*+1+tCCD, … After 64
columns it clears CSC and pulses `done`, exactly nPTL = 128 cycles after *s*.

A pause in cycle *p* stops the stream. The column issued at or before *p*
still completes. CSC and PC then freeze. A command that arrives while CSC is
valid is a *resume*: the engine continues at CSC+1 and ignores the column the
command carries.

The arbiter mirrors this for every bank without any status wire. It keeps:

- `StartAt`, the cycle the command or its resumption was issued;
- the number of columns finished before that.

From these it computes the inferred counter:

```
PC_inf = pc_base + (now - StartAt - 1) / tCCD
```

It knows which cycle is a column boundary, so it knows three things:

- when the command ends, which pops its queue entry;
- when a pause has taken effect, at the next boundary;
- how many columns are left after a resume. For example, pausing after
  columns 64–65 leaves 62 × tCCD cycles.

The top level asserts every cycle that the device engines and the
controller's inference agree (`a_pee_in_sync`).

The arbiter sends a pause in two cases:

- a refresh is due in the bank's rank;
- a CPU request waits for the bank and its predicted idle window has shrunk
  to the hand-over time.

The hand-over time is: tCCD (finish the column) + the PRE delay above +
tRP + tRCD (reopen the CPU row) + one command slot. It is never sent sooner
than tCCD after the command. Sending the pause as late as possible keeps the
bank computing until the CPU really needs it. The exact formula is this
design's choice; the source describes the goal but gives no formula.

## Idle windows (iwe)

For each bank, the oldest queued CPU request gets a *ready time*:

| bank state | ready time |
|---|---|
| closed | tRCD plus any remaining PRE/refresh wait |
| open on the request's row | the remaining column wait |
| open on another row | remaining PRE wait + tRP + tRCD |

The estimator then replays what FR-FCFS will do:

1. Start with a time cursor at the current bus wait, in the current rank.
2. If some request of the current rank is ready by the cursor, serve the one
   that is ready earliest there.
3. Otherwise jump the cursor to the earliest ready request of any rank, and
   switch to its rank.
4. The served bank's window is the cursor. The cursor then moves on by one
   burst, tBL.

The smallest served time is the bus window. A bank with no CPU request has
the largest window (1023 cycles, saturating). The loop runs once per bank and
is fully unrolled into combinational logic. This is the largest block of the
design, and the one to look at first when timing closure matters.

## Choosing PIM work (pim_scheduler, pim_cmd_queue)

The PIM scheduler offers at most one command per cycle, in this order:

1. **`PIM_RdBuf`/`PIM_WrBuf`** at a PRWQ head. It needs a free data bus and
   buffer, and a bus window of at least one burst.
2. **`PIM_LdBuf`/`PIM_StBuf`** at a PRWQ head.
3. **`PIM_Exec`** at a PEQ head.

A bank-level command (2 or 3) also needs all of the following:

- an idle engine, or one paused on this very queue's command;
- no refresh due;
- a bank window that covers opening the PIM row, one column, and reopening a
  CPU row (tRP + tRCD).

If the PIM row is not open, the candidate is the PRE or ACT that opens it.
The lowest bank index wins ties.

The arbiter defers a CPU ACT when the PIM scheduler offers a command for the
same bank. The PIM command goes first, and the pause logic hands the bank
back in time.

The two queues behave as follows:

- PEQ and PRWQ are 2-entry FIFOs per bank, so the transfers of one bank stay
  in order.
- A `PIM_WrBuf` carries its data burst in the queue.
- A `PIM_Barrier` is accepted only when every queue is empty and no engine is
  busy. A phase of overlapped transfers and computation therefore completes
  fully before the next phase is admitted.

## CPU side (mem_queue, frfcfs_sched, refresh_ctrl, bank_tracker)

This part is a conventional controller, kept simple:

- a 16-entry request queue in arrival order;
- priority: refresh, then ready row hits (the current rank first, to avoid
  rank switches), then the ACT or PRE of each bank's oldest request;
- a row is not closed while queued requests still hit it;
- no ACT goes to a rank that has a refresh due;
- banks busy with PIM are left alone, because the arbiter pauses them
  instead;
- refresh is an all-bank REF per rank, every tREFI, with the two ranks half
  an interval apart.

CPU data does not pass through the model. `cpu_issue_valid`/`cpu_issue_tag`
report when a request's column command goes out.

## Device side (pim_bank, pim_buffer)

Each bank decodes the C/A bus for its own index. A column step of the engine
is routed by the command kind:

| command | data path |
|---|---|
| Exec(Ld) | array → PIM unit |
| Exec(St) | PIM unit → array |
| LdBuf | array → buffer word PC |
| StBuf | buffer word PC → array |

The buffer's bus side works in 256-bit slots. A hidden pointer advances with
every `PIM_WrBuf`/`PIM_RdBuf`, and resets when a LdBuf or StBuf completes.
This is how address-less transfers line up with the 64 column words.
`PIM_RdBuf` data appears one cycle after the command; the real tCL is left
out.

## Departures and gaps

- Pause lead time, bank tie-breaks, queue depth 16, window saturation, the
  first-column cycle and the buffer pointer are this design's choices.
- Not modelled: tCL/tWTR/tCS and rank-switch timing, CPU data, and the
  `PIM_RdBuf` latency.
- The host software, the PIM datapath and the DRAM arrays are not included.
- Only one channel is built. The evaluated system has two identical ones.
- Changing `N_RANKS` or `N_PTL` in `cosm_pkg` rescales everything. For
  nPTL above 128 the buffer (`BUF_WORDS`) must grow with it.

## Simulation

Every block has a self-checking bench in `tb/`, named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M` at the end. For example:

```
verilator --binary --timing --assert --top-module tb_cosm_top \
    rtl/cosm_pkg.sv rtl/*.sv tb/tb_cosm_top.sv
./obj_dir/Vtb_cosm_top
```

`tb_cosm_top` runs the full-size channel at its default parameters, and
finishes in under a second. It:

- models the DRAM arrays and the PIM units;
- checks that a lone `PIM_Exec` takes exactly 128 cycles;
- round-trips data through WrBuf → StBuf → array → LdBuf → RdBuf;
- runs six rounds of PIM work on all 32 banks against random CPU reads.

Along the way it checks the DRAM protocol (ACT/PRE/tRCD), that each column is
visited once, that stores land in the right place, and that every CPU request
is served. It fails if any of these mechanisms never happened: pause, resume,
ACT deferral, barrier, refresh, or any of the four transfers or two execution
kinds. The unit benches compare against reference models written separately
inside the bench (FR-FCFS, the estimator loop, the PIM priority rules), and
check the cycle counts of every timing rule.
