# RAPIDx in SystemVerilog: banded sequence alignment inside a ReRAM array

RAPIDx aligns DNA reads against a reference with dynamic programming (DP)
done inside resistive memory (ReRAM). Two ideas make that workable.

- **Difference form.** The score matrix H is never stored. Only the
  differences between neighbouring cells are kept (u', v') together with
  the gap states (x', y'). With the scoring offset used here these are
  small unsigned numbers: 5 bits for alignment, 3 bits for edit distance.
- **Bit-serial storage and a narrow band.** Each value stands upright in
  consecutive rows of one bit line. One row-parallel PIM (processing in
  memory) operation works on every column at once. Only a narrow band of B
  anti-diagonal cells is computed per pair, and the band steps down or
  right after each wavefront. A 1024-column array therefore carries
  floor(1024/B) independent pairs side by side, each in its own
  B-column *memory segment*.

This RTL gives the tile and the 64-tile array as cycle-level SystemVerilog:

- a behavioural model of the ReRAM computation memory (CM);
- synthesizable peripheral circuits: shifter, interleaved bit-serial max
  finder, traceback encoder;
- the sequence buffer, the traceback memories (TBMs) and the H-tree between
  them;
- a controller that sequences all of it;
- the global I/O buffer and the top level.

## The recurrence that is computed

For a cell (i, j), the reference base r_j and the query base q_i give
s' = (r_j == q_i ? match : mismatch) + 2o + 2e. The upper neighbour (i-1, j)
and the left neighbour (i, j-1) then give:

```
a  = x'_up   + v'_up        gap candidate from above
b  = y'_left + u'_left      gap candidate from the left
z' = max(s', a, b)
u' = z' - v'_up             (= H(i,j) - H(i-1,j) + o + e)
v' = z' - u'_left           (= H(i,j) - H(i,j-1) + o + e)
x' = max(z', a + o) - z'
y' = max(z', b + o) - z'
H  = H_up + u' - (o + e)    (32-bit, kept only to score and to steer)
```

All of this is modulo 2^PREC, with PREC = 5 or 3, and every value is
unsigned.

- A gap of length l costs o + l·e. If your convention is "o for the first
  gap base, e for each further one", program o − e and e.
- Match and mismatch are programmed already offset, as s' values.
- Example, alignment with A = 2, B = 4, o = 4, e = 2 in the first-base
  convention: program o = 2, o+e = 4, s'match = 10, s'mismatch = 4.
- Example, edit distance: o = 0, o+e = 1, s'match = 2, s'mismatch = 1.

Each cell also records how z' was reached. This is the traceback code:

| Code | Meaning |
|------|---------|
| 00 | z' = s' (diagonal) |
| 01 | z' = a (from above) |
| 10 | z' = b (from the left) |
| 11 | none of these |

When several are equal, the first in this order wins.

## Band geometry and the two moves

Segment s owns columns s·B … s·B+B−1. Column p of a segment holds cell
(ib − p, jb + p) of that pair's matrix. The band is an anti-diagonal run of
B cells, with its "left" cell p = 0 lowest in the matrix.

**Start.** The first wavefront is (ib, jb) = (B, 1). Before it, the
controller fetches B reference and B query bases into the sequence rows.
All state starts at zero, and any neighbour outside the band reads as zero.

**Direction.** After each wavefront the controller compares H at p = B−1
(right end) with H at p = 0 (left end), using a signed bit-serial compare.
It moves right if the right end is larger, and down otherwise. With the
adaptive flag off, the band simply alternates. A move that would leave the
matrix is forced the other way.

**Right move.** jb + 1. The rows R, v', x' and H shift one column toward
p − 1. The next reference base enters at p = B − 1.

**Down move.** ib + 1. The rows Q, u' and y' shift one column toward
p + 1. The next query base enters at p = 0.

**Why that works.** After the shift, every cell's "up" and "left"
neighbours sit in its own column again. This is what keeps the computation
row-parallel.

**End.** A segment is done when its p = 0 cell reaches (n, m). Its score is
H there. Finished segments keep computing in place but no longer move. The
batch ends when all segments are done. A pair needs n ≥ B.

## Inside a tile

```
 host bus ──► registers ─► rapidx_tile_ctrl ──cmd──► rapidx_cm (1024 x 1024, PIM)
                 │                 │    ▲                  │ 128-bit slice (SA)
                 ▼                 │    └──── sa_q ◄───────┘
         rapidx_seq_buffer ──base──┤          │
             (2 KB)                │          ├─► rapidx_shifter ──► WRITE back
                                   │          ├─► rapidx_max_finder (128 lanes)
                                   │          ├─► direction lane (signed)
                                   │          └─► rapidx_traceback_logic
                                   │                        │ 2 code rows
                                   └──► rapidx_htree ◄──────┘
                                           │
                                    15 x rapidx_tbm (1024 x 1024)
```

### Row map of the CM

The row map is fixed in `rapidx_pkg`:

- 2-bit reference and query bases: rows 0–3.
- u', v', x', y' at 8, 16, 24 and 32.
- s' and the gap candidates a and b.
- z' and temporaries.
- The mismatch row and the four flag rows.
- The 32-bit H at 128.
- The programmed constants: one row per bit, all-ones or all-zeros.

### PIM operations

PIM operations act on whole rows:

- NOR, OR, NOT, copy and row set take 1 cycle.
- AND and XOR take 2 cycles.
- ADD and SUB run bit-serially, LSB first, 6 cycles per bit with a carry row.
- A multi-input NOR tests a field for zero. It turns "z' XOR s' is all zero"
  into an equality flag.
- READ and WRITE move one 128-bit slice through the column MUX.

### What the CM cannot do

Three jobs go to the peripherals, which read the registered SA output:

- **Max.** The interleaved bit-serial max finder has one lane per SA bit.
  The controller reads a bit row of the first operand (the lane latches it),
  then the same bit row of the second (the lane compares it), MSB first. The
  max bit goes back into the CM with WRITE. Two passes give
  max(max(s', a), b). Two more give max(z', a+o) and max(z', b+o).
- **Direction.** One lane in signed mode compares the two 32-bit H ends.
- **Shift.** The shifter moves a row by one column per segment, with masks
  for which columns move, which take an inserted base, and the shift
  direction. A 1024-bit row is streamed as 8 slices. The bit that crosses a
  slice boundary is carried in a register, so output lags input by one
  slice.
- **Traceback.** The traceback logic reads the four flag rows and encodes
  them into two code rows. The controller writes those into the TBMs through
  the H-tree, at rows 2t and 2t+1 for wavefront t. The row counter runs
  across the TBMs.

### Handshake and timing

- Every CM command goes issue → accept → wait for ready → consume. That is
  3 cycles plus the operation's own latency.
- READ data arrives one cycle after acceptance and is captured as soon as
  it arrives.
- At full size (B = 11, 8 slices per row), one wavefront took about 7,000
  cycles in simulation, about 14 µs at 500 MHz.
- Most of that time is the shift phase: about 60 rows × 8 slices, read and
  write each. The per-segment H reads of the direction decision come next.
- Short, narrow pairs are processed k at a time per tile, and 64 tiles run
  independently.

## Host interface

The top (`rapidx_top`) has plain ports.

**Writes.** `h_we`, `h_tile`, `h_addr` and `h_wdata` write one tile. Adding
`h_bcast` writes every tile: use it for the scoring setup, the sequence
image and the start command.

**Reads.** `h_re` reads a tile register. `h_tb_re` reads a TBM slice of
the selected tile, addressed by `h_tb_idx`, `h_tb_row` and `h_tb_slice`.
Data and its valid signal come two cycles after the request. `all_done`
is the AND of all tiles' done.

**Register map** (`rapidx_pkg`):

| Address | Register |
|---------|----------|
| 0 | control: write 1 = start; read {tb_overflow, done, busy} |
| 1 | B |
| 2 | k |
| 3 | precision |
| 4, 5 | s' match, s' mismatch |
| 6, 7 | o, o+e |
| 8 | mode: bit0 adaptive direction, bit1 traceback enable |
| 9 – 13 | counters: wavefronts, cycles, down / right / forced moves |
| 0x200 + 4s + {0,1,2,3} | segment s: n, m, reference and query start (base addresses). Reading +0 gives the score. |
| bit 15 set | write one byte (four bases, base i in bits 2i+1:2i, A=00 C=01 G=10 T=11) of the sequence buffer |

- Configuration is accepted only while the tile is idle.
- The TBMs hold NTBM·1024/2 = 7,680 wavefronts. After that, traceback
  writing stops and the overflow flag is set.

## Where this follows the source design, and where it does not

**Taken from the source design:**

- 64 tiles.
- Per tile: one 1024×1024 CM, 15 TBMs on an H-tree, a 2 KB sequence buffer.
- A 128-bit column MUX.
- XOR in 2 cycles and a 1-bit add in 6.
- 5-bit and 3-bit precision.
- Bit-serial layout and memory segments of width B.
- An interleaved max finder as wide as the SA.
- Direction by comparing the two band ends.
- 4 flags converted to 2-bit codes and stored in the TBMs.
- Bandwidth B = min(w + 0.01L, 100), chosen by the host.

**This design's own choices:**

- The exact command schedule and the row map.
- The starting state of the band and the zero boundary outside it.
- Forced moves at the matrix edges.
- The alternating direction when adaptive mode is off.
- The traceback code values, and priority when flags tie. The source
  expects only one flag set. With integer scores ties do happen, so a
  priority encoder is used; for one-hot flags it gives the same result.
- The overflow behaviour.
- The register map and host protocol.
- The two-cycle read path.

**Resolved conflicts:**

- The source states the gap cost once as o + (l−1)e and once as o + l·e.
  The RTL uses o + l·e, and the other convention maps onto it as described
  above.
- The source's update equation mixes neighbour indices. The RTL uses the
  consistent form shown above.

**Not built:**

- The ReRAM cells themselves: the CM is a behavioural model of their
  digital function and cycle counts.
- The global row driver, which is analog.
- The switch-partitioned processing rows of the CM: the model is a
  single flat array with a fixed row map.
- The host-side seeding and batching.
- The traceback walk itself. The codes are produced and stored, and the
  host reads them out.

## Capacity against the evaluated workloads

**Short reads, 100–500 bp, B = 11…15.** These fit: at most 2·(n+m−B) ≤
2,000 TBM rows against 15,360, and k ≤ floor(1024/B) segments. The 2 KB
buffer (8,192 bases) limits a batch to about 8192 / (n+m) pairs, for
example 16 pairs of 250 bp.

**Long reads up to 10 kbp, B up to 100.** These do not fit in one pass.
Storing every wavefront as a row pair needs about 40,000 TBM rows, against
15,360. One pair also needs 20,000 bases against 8,192. 2 kbp pairs fit,
one or two per tile.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

**Peripherals.** The shifter, max lane, max finder, traceback encoder, buffer,
TBM and H-tree are checked against direct models.

**CM.** The CM is checked against a shadow array, including the
2-cycle XOR/AND and 6-cycles-per-bit ADD/SUB latencies.

**Controller, tile and top.** These use a shared word-level model of the
banded DP (`tb/rapidx_tile_env.svh`). Every segment's score, every move
counter, the status and overflow flags, and the traceback code of every
active column of every stored wavefront must match it exactly.

- `tb_rapidx_tile_ctrl` also stalls the CM handshake at random. It
  checks that back-to-back program commands are spaced by exactly
  3 + latency cycles.
- `tb_rapidx_top` runs four reduced tiles through two batches. The second
  batch switches mode: alignment with traceback and overflow, then edit
  distance in 3 bits with a fixed direction and no traceback. It fails if
  any mechanism never occurs: down, right or forced moves, early segment
  finish, each mode, overflow, broadcast, or all tiles busy.
- `tb_rapidx_top_full` runs the top at its default size: 64 tiles, 1024
  columns, 15 TBMs, B = 11. It checks all 64 tiles, about 33,000 checks.
  Building it with verilator takes several minutes; the simulation then
  takes about one.

The model follows the same algorithm as the RTL. The testbenches show
that the hardware computes that algorithm. They do not show that the
banded result equals a full-matrix alignment; that is a property of the
algorithm and its band width.

To simulate a testbench, e.g. the tile:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rapidx_pkg.sv \
          tb/tb_rapidx_tile.sv -y rtl --top-module tb_rapidx_tile
./obj_dir/Vtb_rapidx_tile
```
