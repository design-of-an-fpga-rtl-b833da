# QRM: a pipelined neutral-atom rearrangement accelerator

A neutral-atom quantum computer loads atoms into a square grid of optical
traps at random: each trap holds an atom with a probability of about one
half. Before a computation can start, the atoms have to be moved so that a
square region in the middle of the grid is completely filled. The moves are
made with crossed acousto-optic deflectors. They pick a set of rows and a set
of columns and drag every atom at their crossings by the same step in the
same direction, so many atoms can move at once. Working out the schedule of
such moves has to be fast, because it is done again every time atoms are
loaded.

This RTL computes such a schedule in hardware. It rests on one observation:
pulling atoms toward the centre of the grid is the same as pulling each
quadrant's atoms toward the corner that touches the centre. Mirror the four
quadrants so that this corner is always at index (0, 0), and one compression
circuit serves all four, side by side. That circuit is a bit-level pipeline
that takes one line of a quadrant per clock and compresses it toward site 0.
Its output is the quadrant transposed, so the same circuit, fed again,
compresses the columns.

At the default size, a 50 x 50 array with four iterations, one job takes
243 cycles from the end of the input transfer to the last output beat. That
is 0.97 µs at 250 MHz.

## The algorithm as built

Conventions. The array has W x W sites, with W even. Row 0 is north and
column 0 is west. It travels as a row-major bit-field: bit `R*W + C` is the
site in row R, column C, and 1 means an atom. Each quadrant is QW = W/2 sites
wide.

**Quadrant view.** Each quadrant is mirrored so that local row i and local
column j count sites away from the centre lines:

| quadrant | original row | original column |
|----------|--------------|-----------------|
| NW | QW-1-i | QW-1-j |
| NE | QW-1-i | QW+j |
| SW | QW+i | QW-1-j |
| SE | QW+i | QW+j |

**One pass over a line.** A line is a QW-bit vector, and site 0 is the one
nearest the centre. For k = 0, 1, ..., QW-1 in turn:

- If site k is empty (and shifting at distance k is enabled), every site
  beyond k slides one place toward the centre. This is the shift command for
  step k.
- Otherwise nothing happens.

Each site is looked at exactly once, in order, and a step moves atoms by at
most one site. So one pass does not always compress a line fully. If sites k
and k+1 are both empty, site k stays empty after step k.

**One iteration.** One pass runs over all rows of the quadrant (horizontal
moves), then one over all columns of the result (vertical moves). Four
iterations are run (`N_ITER`).

**Moves.** Step k of the row pass is the same operation in every row of a
quadrant. The rows that shift at step k can therefore all move at once. The
deflectors select those rows, plus the columns beyond the hole, and drag
everything one site toward the centre. The same column selection serves the
NW and SW quadrants, because they share the western columns. One command
therefore covers both halves of the west side:

| step kind | merged quadrants | direction atoms move |
|-----------|------------------|----------------------|
| row pass, west | NW + SW | east |
| row pass, east | NE + SE | west |
| column pass, north | NW + NE | south |
| column pass, south | SW + SE | north |

A merged command that moves no atom is dropped. A row takes part only if an
atom in it really moves, that is, if the site was empty and some atom lay
beyond it.

**How well it fills.** With 50 % loading and four iterations, random
50 x 50 arrays end with 891 to 899 of the 900 sites of the central 30 x 30
target filled. The design does not guarantee a defect-free target: it runs a
fixed number of iterations, and each step moves atoms by only one site.
The original description of the method says that four iterations completed
the rearrangement. That is not confirmed here.

## The shift kernel (`shift_kernel`)

This is the part that is hardest to follow, and everything else is built
around it.

The kernel is a pipeline of QW stages. Stage k holds what is left of one
line after sites 0..k-1 have been decided; its bit 0 is site k. Per stage:

```
sh   = s_en[k] & ~line[0]          shift command
col  = sh ? line[1] : line[0]      final content of site k
mov  = sh & |line[QW-1:1]          the command moves an atom
next = sh ? line >> 2 : line >> 1  rest of the line, a 0 enters at the top
```

Every stage writes `col`, `sh` and `mov` into its own QW-bit shift register
(the column buffer, the command buffer and the moved buffer). A new line
enters every cycle, so after QW lines each stage's buffers hold one bit per
line. Column buffer k is then bit k of every line: the transposed line k.

Lines come in groups of QW, with `in_last` on the last one. Line r of a group
enters at cycle t0+r and reaches stage k at t0+r+k+1. Column buffer k is
therefore complete at t0+QW+k. It is sent out one cycle later, together with
its command and moved vectors and its index k:

```
cycle       t0 .. t0+QW-1          t0+QW+1 .. t0+2QW
in          line 0 .. line QW-1
out                                column 0 .. column QW-1
```

The output is again one line per cycle with `out_last` on the last one. It
can go straight into a second kernel, which then works on columns.

Worked example, from a 10 x 10 array (QW = 5). Lines are written with
bit 4 first:

| line | in | column 0 / command 0 | column 1 / command 1 |
|------|----|----------------------|----------------------|
| 0 | 11001 | 1 / 0 | 0 / 1 |
| 1 | 01000 | 0 / 1 | 1 / 1 |
| 2 | 01010 | 1 / 1 | 1 / 1 |
| 3 | 11011 | 1 / 0 | 1 / 0 |
| 4 | 01010 | 1 / 1 | 1 / 1 |

So column 0 comes out as `11101` and command 0 as `10110`, with bit r taken
from line r. `tb_shift_kernel` checks these values.

`s_en` is one bit per stage. A 0 stops the pipeline from shifting at that
distance from the centre, for example to avoid moves far outside the target.
The input is held for the whole job.

## Quadrant pipeline (`quadrant_processing`)

Each quadrant has two kernels in series. The row kernel compresses rows and
emits columns. The column kernel compresses those columns and emits rows.
The column kernel's output is fed back into the row kernel until `N_ITER`
iterations are done. The iteration number travels with the data as a 2-bit
tag, so there is no controller. The last iteration's rows are the quadrant's
final state. The first row enters at t0. Iteration n's output rows appear at
t0 + 2(n+1)(QW+1) + k, so the final rows appear at
t0 + 2·N_ITER·(QW+1) + k.

`movement_recording` converts each kernel's moved vector into a record in
original coordinates, undoing the mirroring. The four quadrant pipelines run
in lockstep.

## Loading and output

`load_data` stores the input packets. There are ceil(W·W/1024) of them:
three at W = 50. Two cycles after the last packet, four `load_vector` units
start producing one mirrored row of each quadrant per cycle. New input is
refused until the job's output has been sent.

`output_combination` contains three parts:

- `row_combination` merges the four quadrants' records as in the table
  above, drops empty ones and rebuilds the final W x W array.
- `moves_packer` packs the records into 1024-bit beats.
- A FIFO holds the output so that the stream can stall. Its depth covers the
  most that one job can produce.

Move record, most significant bit first, REC_W = 2 + 2 + ceil(log2 W) + W
(60 bits at W = 50):

| field | bits | meaning |
|-------|------|---------|
| iter | 2 | iteration 0..3 |
| axis | 1 | 0 horizontal, 1 vertical |
| side | 1 | horizontal: 0 west half, 1 east half; vertical: 0 north, 1 south |
| line | ceil(log2 W) | original column (horizontal) or row (vertical) of the holes being filled |
| sel | W | rows (horizontal) or columns (vertical) that move |

Executing a record means this: in every selected row, with side = west,
the atoms in columns 0..line-1 slide one column east, into the empty site at
`line`. The other cases mirror this. Records leave in the order they must be
executed.

Output stream: floor(1024/REC_W) records per beat (17 at W = 50), record n at
bits `[n*REC_W +: REC_W]`. Unused slots are zero; a real record never is,
because its selection is not empty. Move beats have `m_axis_tuser = 1`. The
final array follows in ceil(W·W/1024) beats with `tuser = 0`, in the same
layout as the input, and `tlast` is set on the last one.

## Top level (`qrm_accelerator`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, active-low asynchronous reset |
| `s_axis_tvalid/tready/tdata/tlast` | in/out | 1024 | input bit-field packets |
| `m_axis_tvalid/tready/tdata/tlast/tuser` | out/in | 1024 | move beats, then final array |
| `s_en_row`, `s_en_col` | in | W/2 | per-distance shift enables of the two passes |
| `busy` | out | 1 | a job is in progress |
| `done` | out | 1 | pulse: last output beat accepted |
| `n_moves`, `n_dropped` | out | 16 | merged commands sent, empty ones removed |
| `cycles` | out | 16 | cycles from the start of the rearrangement to `done` |

Parameters: `W` (50), `N_ITER` (4) and `FIFO_DEPTH` (computed, 27 at the
defaults).

Measured job time, from the end of the input to the last output beat, with
the output never stalled (`tb_qrm_workloads`, one build per W):

| W | cycles | µs at 250 MHz |
|---|--------|---------------|
| 10 | 61 | 0.24 |
| 20 | 106 | 0.42 |
| 30 | 151 | 0.60 |
| 50 | 243 | 0.97 |
| 70 | 335 | 1.34 |
| 90 | 428 | 1.71 |

The time is about 2·N_ITER·(W/2+1) + W/2 cycles plus a few cycles of
input/output. It grows linearly with W.

## Where this RTL follows its source and where it does not

The source of this design is an accelerator written in HLS C++ and described
at block level. The following parts come from that description:

- the three stages (load, four quadrant pipelines, output combination);
- the quadrant flip;
- the stage rule of the shift unit, with its column and command buffers, the
  zero fed in at the top and the per-stage enable;
- row-then-column passes repeated four times;
- the quadrant pairs used for merging;
- the removal of empty shifts;
- 1024-bit packets and the 250 MHz target.

The rest is this design's own, because the description does not give it:

- The two-kernels-with-loop-back structure and all cycle timing. The only
  latency figures given are "about Q_w per pass", "2·Q_w plus one row per
  iteration" and about 1 µs at 50 x 50, and the RTL matches them.
- What counts as an empty shift. Here it is a command that moves no atom,
  derived from the extra moved flag.
- The move-record format, the beat packing, the stream order and `tuser`.
- Merging the quadrants' commands as they appear. The description speaks of
  a large FIFO in front of the merging unit; the FIFO here sits after it,
  on the output.
- The quadrant orientation. The text says the target goes to the
  bottom-left, the drawings show other corners, and the RTL uses
  "index 0 = next to the centre".
- The control: the job starts on the last input packet and is locked until
  the output has gone.

Beyond the RTL: the processor, DDR memory, DMA and the camera/AWG chain are
outside this design; the testbenches take their place. Resource use and the
exact times of the FPGA build described in the source cannot be compared.
Their small-array times (0.8 µs at 10 x 10) include overheads that this RTL
does not have.

## Verification

Every module has a self-checking testbench in `tb/`. Expected values come
from `qrm_ref_pkg`, a behavioural model that moves atoms site by site
instead of shifting bits.

- `tb_shift_kernel` checks the worked example, random groups with random
  enables, and the latency of QW+1+k cycles.
- `tb_quadrant_processing` checks every record of every iteration and the
  final rows against the model, and the latency of 2·N_ITER·(QW+1)+k cycles.
- `tb_qrm_accelerator` runs the whole design at the default parameters
  through eight random jobs. It replays the emitted schedule on the initial
  array with the model and requires every move to be legal and the result to
  equal the final array that was sent. It compares that array with the
  reference algorithm. It also requires each mechanism to occur at least
  once: multi-packet input, loop-back, two-quadrant merges, empty-shift
  removal, `s_en` blocking, output stalls, a partly filled last move beat,
  and input refused while busy.
- `tb_qrm_workloads` runs the W = 10, 20, 30, 50 and 90 builds. The W = 70
  row of the table was measured with the same testbench with 70 added to its
  list of sizes.

Assertions check the handshake rules: packet count and `tlast`, group length
into a kernel, lockstep of the quadrants, no FIFO overflow, and that a flush
never coincides with incoming records.

## Simulating

With Verilator 5, for example for the full design:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/qrm_pkg.sv tb/qrm_ref_pkg.sv tb/tb_qrm_accelerator.sv \
    --top-module tb_qrm_accelerator -Mdir obj
./obj/Vtb_qrm_accelerator
```

Each testbench prints `TB_RESULT checks=N failures=M`. To change the array
size, set `W` on `qrm_accelerator`; it must be even and at most 128 for the
reference model.
