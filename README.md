# Data-flow tracking for intermittently powered non-volatile FPGAs

An FPGA that runs from harvested energy loses power often, sometimes every
few milliseconds. A non-volatile FPGA keeps its configuration through an
outage, and its flip-flops can be built as non-volatile flip-flops (NV-FFs)
that copy their value into resistive memory cells on command. Saving every
flip-flop of the chip on every outage wastes energy. Periodic checkpoints
are no better: they save even when power is stable, and after a loss they
roll back to the last checkpoint.

This RTL implements the hardware side of *DFT-FPGA*, the data-flow tracking
scheme described in "Low Overhead Online Data Flow Tracking for
Intermittently Powered Non-volatile FPGAs" (Zhang, Patterson, Liu, Yang, Xue,
Hu). The idea is to know, in every clock cycle, which registers of an
HLS-generated program hold live intermediate data, and to save only the
FPGA SLICEs that contain those registers, and only when power actually fails:

* A **function tracker** runs next to each function of the program. It is a
  pair of small binary counters that follows the function cycle by cycle.
* An offline analysis of the HLS schedule and of the placement gives, for
  every cycle of every function, the SLICE that holds that cycle's live
  registers. These SLICE addresses are **preloaded into a table** after the
  FPGA is configured.
* On a power-loss event the **control unit** freezes the program, reads every
  tracker's status, looks the status up in the table, and asks the fabric to
  store those SLICEs, plus the SLICEs of the trackers themselves. On resume
  it retrieves the same SLICEs in the same way and lets the program continue
  from the cycle where it stopped.

Roll-back is therefore at most one cycle per outage, and the energy spent on
saving depends on the number of outages, not on the length of the program.

## Block overview

```
            p_loss / p_resume (from the energy-harvesting front end)
                 |
   +-------------+----------------------------------------------+
   |  dft_fpga_top                                              |
   |                                                            |
   |  function_tracker[0] --lock_tail--> function_tracker[1]    |
   |  function_tracker[2]   (PRED[] gives the lock chain)       |
   |         | f_status[i]                                      |
   |         v                                                  |
   |  nvff_control_unit --raddr--> cu_bram <-- tbl_we/waddr/wdata (preload)
   |         |          <--rdata--                              |
   +---------+------------------------------------------------ -+
             | hold, saved               | cmd_valid/ready, cmd_op, cmd_slice
             v                           v
     HLS program (clock hang)     NV-FF control path of the fabric
```

| File | Contents |
|------|----------|
| `rtl/dft_pkg.sv` | `data_cu_t {slice_x, slice_y}` table entry, `slice_op_e` (store/retrieve) |
| `rtl/function_tracker.sv` | one function tracker |
| `rtl/cu_bram.sv` | the SLICE address table |
| `rtl/nvff_control_unit.sv` | look-up and store/retrieve sequencing |
| `rtl/dft_fpga_top.sv` | trackers, lock chain, table and control unit wired together |

The HLS program (its state machine and function modules), the NV-FFs, the
fabric's per-SLICE store/retrieve control path and the harvester are not
part of this RTL. Their signals are ports of the top.

## Function tracker

The tracker is the only part that has to follow the program exactly, so it
is worth understanding in detail.

**Counting.** A function is assumed to be one outer loop of `T_ITER`
iterations whose body lasts `COUNT_MAX` cycles. A function without a loop
has `T_ITER = 1`, and `COUNT_MAX` is then its length. The tracker has a
W-bit iteration counter `iter` and a W-bit cycle counter `count`. While the
function runs, `count` goes 1, 2, ... `COUNT_MAX`, then back to 1 with
`iter` incremented. After the last cycle of the last iteration the tracker
stops, clears `count` and `f_status` and raises `lock_tail`. The longest
trackable function is (2^W - 1)^2 cycles:

| W | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|
| cycles | 225 | 961 | 3969 | 16129 | 65025 | 261121 |

Reusing `count` for every iteration is what keeps the table small: a
tracker needs only `COUNT_MAX + 1` table entries, not one per cycle of the
whole function.

**Locks.** HLS runs functions in an order given by their data dependencies.
Tracker i starts counting in the cycle after its `lock_head` is 1, and a
tracker runs once after reset. `lock_head` of a first function is tied to
1, and `lock_head` of a dependent function is the `lock_tail` of its
predecessor. The top takes this order as `PRED[i]`: the index of the
predecessor, or -1. The default `'{-1, 0, -1}` is the three-function
example: F1 and F3 start together and F2 follows F1. The tracker never
looks at the function itself. It starts, counts and ends in step with the
function because both follow the same schedule.

**Status.** In a cycle where `p_loss` or `p_resume` is 1, the tracker copies
`count` into `f_status`, and the control unit reads it one cycle later. An
idle or finished tracker has `count = 0` and reports 0.

**Roll-back.** A multi-cycle operation (for example a two-cycle multiply)
has not written its result register yet in its first cycle. If power fails
in the cycle just after that one, the operation's input registers are the
live data, not its output register, so after the restore the operation must
run again. `ROLLBACK_MAP` has one bit per value of `count`. On a power loss
in a marked cycle, the tracker moves `count` back by one before it reports
it. The control unit then saves the previous cycle's SLICE, and the program
repeats that one cycle after the restore. Cycle 1 is never rolled back.
Which cycles to mark comes from the offline schedule analysis.

**Clock hang.** While `hold` is 1 (data being saved, power off, data being
restored) `count` and `iter` do not move. In the `p_loss` cycle itself the
tracker does not advance either. In a real device the tracker registers are
NV-FFs in the always-saved region (see below), so they survive the outage.
In this RTL they simply keep their values.

With W = 8 the tracker is 26 flip-flops: 3 x 8 counter and status bits, plus
`lock_tail` and `active`.

## SLICE address table and its layout

`cu_bram` is a plain synchronous-read RAM of `data_cu_t` entries. Each entry
is a 32-bit X and a 32-bit Y SLICE coordinate. An all-zero entry means
"nothing to save". The table is laid out like this:

```
index 0 .. TRK_SLICES-1           SLICEs of the trackers themselves (always saved)
OFFSET[0] = TRK_SLICES            0   <- read when tracker 0 reports status 0
OFFSET[0]+1 .. OFFSET[0]+CMAX0    SLICE live in cycle 1 .. COUNT_MAX of function 0
OFFSET[1] = OFFSET[0]+CMAX0+1     0
...
```

The control unit reads entry `OFFSET[i] + f_status[i]` for tracker i. A
tracker that has not started, or has finished, reports 0. It therefore
reads the zero entry at its own offset and causes no action. Unused slots of
the tracker region are also left at zero. The top computes `OFFSET[]` from
`TRK_SLICES` and `COUNT_MAX[]`, and it stops elaboration if `CU_DEPTH` is
too small. The preload must write the whole table, zeros included. The RAM
has no reset.

One entry names one SLICE. If the schedule puts a cycle's live registers in
more than one SLICE, this layout cannot express that. The offline mapping
must then place those registers together, or the entry format must be
widened.

## Control unit: the outage sequence

`nvff_control_unit` is a four-state machine (`S_RUN`, `S_READ`, `S_CMD`,
`S_OFF`):

1. **Loss.** `p_loss` raises `hold` in the same cycle (combinationally).
   The trackers capture their status at the end of that cycle.
2. **Store walk.** The unit visits `TRK_SLICES + N_TRK` entries: first the
   tracker region, then one entry per tracker. Each visit is a table read
   (`S_READ`) followed by one cycle in `S_CMD`. If the entry is non-zero,
   `S_CMD` offers `{OP_STORE, slice}` on `cmd_valid`. It waits for
   `cmd_ready`, and the command stays stable until it is accepted (this is
   asserted). A walk over E entries takes 2*E cycles plus every cycle
   `cmd_ready` is low.
3. **Powered down.** `saved` = 1 and `hold` stays 1 until `p_resume`.
4. **Retrieve walk.** The same visit order with `OP_RETRIEVE`. The tracker
   SLICEs come back first, and the trackers report their status on
   `p_resume`. At the end `hold` falls and the program and trackers
   continue.

Power pulses that arrive while a walk is already running are ignored. So is
a `p_resume` that arrives before `saved`. `p_loss` and `p_resume` must never
be 1 together (this is asserted).

## Top-level parameters

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `N_TRK` | 3 | number of functions/trackers |
| `W` | 8 | tracker width (the width the scheme evaluates) |
| `PRED` | `'{-1, 0, -1}` | lock chain, predecessor index or -1 |
| `T_ITER`, `COUNT_MAX` | 255 each | outer-loop count and body length per function |
| `ROLLBACK_MAP` | bit 4 of tracker 0 | example roll-back point |
| `TRK_SLICES` | 16 | size of the always-saved tracker region |
| `CU_DEPTH` | 1024 | table entries (the default layout needs 16 + 3*256 = 784) |

Each function length and roll-back point is a property of the program
being tracked. The defaults are examples: the largest functions an 8-bit
tracker can follow, and one multi-cycle operation in F1. For a real program,
set the parameters from the HLS schedule and generate the table from the
placement.

Synthesised with default parameters, the top is 86 flip-flops plus a
1024 x 64-bit memory. One 8-bit tracker needs 256 x 64 bits, which is two
18 Kbit block RAMs.

## Where this RTL goes beyond the description it follows

These points are this implementation's own choices. The description leaves
them open:

* The tracker's counter wraps from `COUNT_MAX` straight to 1. The reset to 0
  between iterations is folded into the same cycle, so the tracker never
  loses a cycle against the function.
* A tracker starts one cycle after `lock_head`, and runs once per reset.
* Roll-back is exactly one cycle. A loss deeper inside an operation longer
  than two cycles would need a larger step.
* Everything about the control unit's sequencing is this design's own: the
  walk order, one read at a time, the valid/ready command port, `hold` and
  `saved`, and ignoring overlapping power events. The description gives only
  the look-up `cu_BRAM[f_status + offset]` and states that tracker SLICEs
  are always saved and are restored first.
* A zero entry stands for "no SLICE", so SLICE X0Y0 cannot be named.
* Reset is asynchronous and active low.

Not included: the offline analysis (mapping registers to cycles, splitting
and merging functions), which is software; the HLS program; and the NV-FF
circuit and its per-SLICE control path. For a program with many functions,
set `N_TRK` and the per-function arrays. With 8-bit trackers the table needs
`TRK_SLICES + sum(COUNT_MAX[i] + 1)` entries, so for example 24 functions
need more than 1024 entries. A program too small to be worth tracking can
be handled with the tracker region alone: list all its SLICEs there.

## Simulation

Each testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert rtl/dft_pkg.sv rtl/function_tracker.sv \
    rtl/cu_bram.sv rtl/nvff_control_unit.sv rtl/dft_fpga_top.sv \
    tb/tb_dft_fpga_top.sv --top-module tb_dft_fpga_top -o sim
./obj_dir/sim
```

| Testbench | What it shows |
|-----------|---------------|
| `tb_function_tracker` | 4-bit tracker, 3 x 5 cycles, compared every cycle with a linear-progress model; losses, hung clock, resume, the roll-back cycle, loss while idle and after the end; exact function length |
| `tb_cu_bram` | write/read-back, one-cycle latency, read-first collision |
| `tb_nvff_control_unit` | store and retrieve walks against a list built from the bench's copy of the table, random back-pressure, zero entries skipped, ignored second loss pulse, walk cycle counts |
| `tb_dft_fpga_top` | default size, a complete run of all three functions (about 131k cycles) through 8 outages. It checks every tracker output every cycle, every command, and the walk timing. It counts losses, roll-backs, skipped entries, back-pressure, the F1-to-F2 hand-over and loop wraps |
| `tb_tracker_sizes` | trackers of 4..9 bits at their largest setting follow 225 ... 261121 cycles; a loop-free 200-cycle function |
| `tb_power_loss_sweep` | default top, 1..10 random outages per run: roll-back cycles (0 unless a loss hits the marked cycle) and stored SLICEs (11 to 14 per outage, so linear in the outage count) |

Verilator's simulator has only two logic states, so the benches preload the
whole table, and every register the design reads is reset. The table
contents in the benches come from the formula
`x = 1 + (37 j mod 113)`, `y = 13 j mod 150`, with zeros at each tracker
offset and in tracker-region slots 11..15.
