# Event-driven block-matching optical flow for a 240x180 DVS

A dynamic vision sensor (DVS) does not send frames. Each pixel sends an
address event when its brightness changes by about 15%. This core estimates
local motion (optical flow) one event at a time, the way an MPEG encoder
estimates motion: it compares a small block of pixels with displaced copies
of that block from an earlier time and keeps the displacement that matches
best.

Three ideas make this cheap enough for a few percent of a mid-size FPGA:

* **Binary slices.** Events are not kept with their timestamps. Each event
  sets one bit in a 240x180 bitmap, the *slice*, and polarity is ignored.
  Three slices exist at any time. Slice *t* is collecting events now. Slices
  *t-d* and *t-2d* hold the two previous intervals of length *d*.
* **Hamming distance.** Two binary blocks are compared by counting the pixels
  in which they differ. For bitmaps this equals the sum of absolute
  differences. In hardware it is one XOR per pixel and an adder.
* **Nine directions, all at once.** For an event at (x, y), the 9x9 block of
  slice *t-d* centred on (x, y) is the reference. It is compared with nine
  9x9 blocks of slice *t-2d*, centred on (x, y) and on its eight neighbours.
  Nine distance circuits run in parallel. A parallel minimum circuit then
  picks the winner in one cycle.

The result is one flow event per input event. It carries the event's address
and one of 9 direction codes. The speed is implied: one pixel per slice
interval *d*, or zero.

## Structure

```
             in_req_n/in_data/in_ack_n             out_req_n/out_data/out_ack_n
  sequencer ─────────────────────────┐           ┌───────────────────────────── monitor
                                     ▼           │
                              ┌──────────────────┴──────┐
                              │ of_fsm (controller)     │   rot_enable   ┌──────────────────┐
                              │  receive → of_calc →    ├───────────────►│ rotation_control │
                              │  send, timeout, rotate  │◄───────────────┤ roles, slice     │
                              └───┬───────┬───────┬─────┘ slice_in_time  │ timer            │
                        t_req     │ td_req│t2d_req│  ▲ td/t2d rows       └────────┬─────────┘
                                  ▼       ▼       ▼  │                   idx_t/td/t2d
                            ┌──────── role → RAM mux (of_top) ───────────────────┘
                            ▼               ▼               ▼
                       slice_ram 0     slice_ram 1     slice_ram 2     (240 x 180 bits each)
```

| File | Contents |
|---|---|
| `rtl/of_pkg.sv` | sizes, event word layouts, slice-memory request record, state names |
| `rtl/of_top.sv` | the core: controller, rotation control, three slice memories, role multiplexers |
| `rtl/of_fsm.sv` | the controller (state diagram below), with the receive and send handshakes |
| `rtl/of_calc.sv` | block matching: row reads, window registers, 9 distances, minimum |
| `rtl/hamming_distance.sv` | XOR of two blocks and a sum: one distance |
| `rtl/min_finder.sv` | parallel "count the smaller ones" minimum circuit |
| `rtl/slice_ram.sv` | one slice: single-port memory, one image row per word |
| `rtl/rotation_control.sv` | which memory plays *t*, *t-d*, *t-2d*; slice timer |

## Slices and their rotation

Each slice memory stores one image row per 240-bit word. It has a single port
and does one of three things per cycle:

* set one pixel;
* clear one whole row;
* read one row, with the data valid on the next cycle.

The memories start at zero, like FPGA block RAM.

`rotation_control` keeps three 2-bit pointers, one per role. After reset,
memory 0 is *t*, memory 1 is *t-d* and memory 2 is *t-2d*. On `enable` the
roles move on together: *t-2d* becomes the new *t*, *t* becomes *t-d* and
*t-d* becomes *t-2d*. A 32-bit cycle counter restarts at each rotation.
`slice_in_time` stays high while the counter is below `slice_duration`.
`of_top` sends each role's request to the memory that plays that role, and
returns the row data of *t-d* and *t-2d* to the controller.

The rotation is not triggered by the timer itself. The controller checks the
timer once after every flow event it sends. When the slice is too old, it
clears the oldest memory row by row (180 cycles) and only then pulses
`enable`. The new *t* slice is therefore empty from its first event on. One
consequence: with no input events, the slices do not rotate.

## The controller

`of_fsm` follows the published state diagram:

```
IDLE ─req=0→ READ → DATA CHECK ─yes→ EXTRACT EVENTS → READ BLOCKS (11 cycles)
  ▲                     │no                                   │
  │◄────────────────────┘                                     ▼
  │                                                 SAD/HD (1) → GET MINIMUM (1)
  │                                                           │
  │◄─yes── TIMEOUT CHECK ◄─ack=0── SEND DATA (loops while ack=1)
  │             │no
  └──────── RAM ROTATION (180 cycles: clear oldest slice, then rotate)
```

* **IDLE** waits for an event. The diagram's labels make both handshakes
  active low.
* **READ** latches the event word and pulls `in_ack_n` low. `in_ack_n` returns
  high once the sender has released its request (a four-phase handshake).
  IDLE accepts a new request only while `in_ack_n` is high, so a slow sender
  is never served twice.
* **DATA CHECK** rejects addresses outside the 240x180 array.
* **EXTRACT EVENTS** sets the event's pixel in slice *t* and starts the
  datapath.
* **SEND DATA** drives `out_data` with `out_req_n` low until the monitor pulls
  `out_ack_n` low.
* **TIMEOUT CHECK** returns to IDLE if the slice is still younger than *d*.
  Otherwise it goes to **RAM ROTATION**.
* The diagram shows no way out of RAM ROTATION. This design returns to IDLE.

## The matching datapath (`of_calc`)

This is the part that needs the most care.

**Reading.** Write R = 4 for the block radius and S = 1 for the search radius.
The nine candidate blocks in *t-2d* together cover rows y-5 … y+5, which is
11 rows. The reference block in *t-d* covers rows y-4 … y+4. The two slices
sit in different memories, so one row counter reads both in parallel, one row
per cycle, for 11 cycles. The *t-d* read is enabled only for its middle nine
rows.

**Cutting rows.** Each returned row is padded with zeros on both sides, so
pixels outside the sensor count as 0. Two pieces are cut out of it with an
indexed part-select:

* columns x-5 … x+5 of the *t-2d* row;
* columns x-4 … x+4 of the *t-d* row.

The pieces are shifted into an 11x11 window register `win` and a 9x9
register `blk`.

**Distances.** Candidate (dx, dy) is the 9x9 sub-square of `win` starting at
row dy+1 and column dx+1. Each candidate and `blk` go, flattened row by row,
into one of nine `hamming_distance` instances. The last row arrives during
the SAD/HD cycle. So the distances are computed from the window *as it will
be after this cycle's shift* (`win_next`), and registered at the end of that
cycle.

**Minimum.** `min_finder` gives each candidate i a bank of 8 comparators and
an adder. The adder counts how many of the other distances are smaller than
d[i]. The candidate whose count is zero is the minimum. With a plain "greater
than" test, two equal minima would both count zero. With "greater or equal",
neither would. So the comparison depends on position:

* against a lower-index candidate j, d[i] ≥ d[j] counts;
* against a higher-index candidate j, d[i] > d[j] counts.

Exactly one count is then zero: the lowest-index minimum. Ties are common in
sparse scenes. The result is registered in the GET MINIMUM cycle.

**Direction code.** `dir = (dy+1)*3 + (dx+1)`, where (dx, dy) is the offset of
the best *t-2d* block from the event:

| dir | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|---|---|---|---|
| offset (dx,dy) | (-1,-1) | (0,-1) | (1,-1) | (-1,0) | (0,0) | (1,0) | (-1,1) | (0,1) | (1,1) |
| motion per *d* | (+1,+1) | (0,+1) | (-1,+1) | (+1,0) | none | (-1,0) | (+1,-1) | (0,-1) | (-1,-1) |

The pattern was at the offset position two intervals ago and is at the event
one interval ago. The motion is therefore minus the offset, with y counted
in the direction of increasing row address. Ties go to the lowest code, so
where several candidates score equally the reported motion leans towards
(+1,+1).

## Interfaces and timing

Word layouts (`of_pkg`):

* `in_data` (17 bits): `{pol, y[7:0], x[7:0]}`.
* `out_data` (21 bits): `{pol, y[7:0], x[7:0], dir[3:0]}`.

Polarity is carried through but never used for matching.

`slice_duration` is *d* in clock cycles. At 50 MHz, the intervals used for
the published scenes are:

| *d* | cycles |
|---|---|
| 40 ms | 2,000,000 |
| 10 ms | 500,000 |
| 3 ms | 150,000 |

It is a run-time input, so *d* can be changed without rebuilding.

`state`, `min_hd` (the winner's distance) and `idx_t` are for observation.

Per accepted event:

* 1 cycle each: IDLE, READ, DATA CHECK, EXTRACT EVENTS;
* 11 cycles: READ BLOCKS;
* 1 cycle each: SAD/HD, GET MINIMUM;
* at least 1 cycle: SEND DATA;
* 1 cycle: TIMEOUT CHECK.

That is at least 19 cycles per event, about 2.6 M events/s at 50 MHz. From
the input acknowledge to the output request takes exactly 15 cycles. A
rotation adds 180 cycles.

## Where this design departs from the published one

* **Match latency.** The published figure is "block dimension + 2" = 11
  cycles: the reads, plus one cycle for the distances and one for the
  minimum. Here the reads take 11 cycles, not 9, because the candidate blocks
  span 11 rows. The single-port, row-per-word memory cannot deliver those 11
  rows in 9 reads. The match therefore takes 13 cycles. The per-event rate is
  about half of the quoted 5 M events/s, because the receive, check, send and
  timeout states are sequential. Banked or dual-port slice memories, and
  overlapping the receive of the next event with the current match, would
  close that gap. Neither is built.
* **Memory.** The original used vendor-generated block RAM. Here it is an
  inferred array with the same size (3 x 240 x 180 bits) and a single port.
  The row-per-word layout and the set/clear write modes are choices of this
  design.
* **Choices made where the source is silent:**
  * the tie rule;
  * the direction code;
  * zero padding at the sensor border;
  * what DATA CHECK tests;
  * the four-phase input handshake;
  * returning to IDLE after rotation;
  * placing the slice timer in `rotation_control`;
  * asynchronous active-low reset;
  * the word layouts.
* **Not built:** the monitor-sequencer board and host PC around the core. The
  downsampling of displayed flow (one flow event per 100 DVS events) was used
  only for display, so it is not built either. The core processes every
  event.

## Parameters

`W`, `H` (240, 180), `BLOCK_DIM` (9) and `SEARCH_R` (1) are parameters of
`of_top`, `of_fsm` and `of_calc`. A larger block only widens the XOR/adder
trees and the window, and adds read cycles. The software study behind the
design found accuracy keeps improving up to radius 11 (23x23). Limits:

* Coordinates are 8 bits wide, so `W` and `H` must stay at or below 256.
* `dir` is 4 bits wide, so `SEARCH_R` above 1 needs `DIR_W` widened in
  `of_pkg`.

The datapath testbench takes the block size from one constant (`BD`); it
passes at 5x5, 9x9 and 23x23, with a match latency of BLOCK_DIM + 4 cycles.

At the default size, synthesis reports about 1,950 word-level cells,
355 flip-flops and 129,600 memory bits.

## Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/of_pkg.sv tb/tb_ref_pkg.sv tb/tb_of_top.sv --top-module tb_of_top
./obj_dir/Vtb_of_top
```

* `tb_ref_pkg` is the reference matcher. It computes all nine distances pixel
  by pixel on plain arrays.
* `tb_hamming_distance`, `tb_min_finder`, `tb_slice_ram` and
  `tb_rotation_control` test the leaf blocks. They use corner cases and
  random data, and `tb_min_finder` forces many ties.
* `tb_of_calc` checks all 9 distances, the winner and the 13-cycle latency.
  It runs on random scenes of several densities, on border and corner events,
  and on a texture shifted by each of the nine offsets.
* `tb_of_fsm` checks the state sequence and run lengths for each event. It
  also covers the pixel written into slice *t*, rejected addresses, slow
  senders, send stalls, and that each row is cleared exactly once per
  rotation.
* `tb_of_top` is the end-to-end test at full default size. A 48x36 random
  texture moves right, then down-right, then down, over eight slices. Noise,
  border events and out-of-range events are mixed in. The monitor
  acknowledges after random delays. Every flow event is compared with the
  reference. The testbench counts that each mechanism occurred: rejects,
  stalls, timeout "yes", 8 rotations, border events and ties. It also checks
  that most events inside the texture report the true motion. In practice
  nearly all of them do. The test runs in well under a second.
* `tb_of_scenes` runs three synthetic scenes shaped like the published test
  recordings. Each uses its published slice duration at 50 MHz: box outlines
  moving right (*d* = 40 ms), sparse points moving down-right (10 ms), and a
  dense texture moving right (3 ms). Events are spread evenly in time, so the
  slices rotate on the core's own timer. Every flow event is checked against
  the reference. Typical shares of events that report the true motion:
  * dense texture: above 99%;
  * sparse points: about 90%;
  * box edges: about 93%. The misses are mostly on edges parallel to the
    motion, where the match is ambiguous.

  It simulates about 10 million cycles in under a minute.

The recorded datasets and the accuracy figures measured on them (angular and
endpoint error against IMU ground truth) cannot be reproduced from the RTL
alone. The scenes above test the mechanism, not the published accuracy.
