# A line-buffered one-level 3-D wavelet transform core for video

This core computes one level of a three-dimensional discrete wavelet
transform (3-D DWT) on video. It takes two adjacent frames at a time:

* Each frame gets a two-dimensional CDF 9/7 transform (rows, then columns).
  This is the spatial part.
* Corresponding coefficients of the two frames then get a Haar transform
  across time. This is the temporal part.

The result is eight sub-bands:

* The temporal low-pass frame (the *L-frame*) holds LLL, LHL, HLL and HHL.
* The temporal high-pass frame (the *H-frame*) holds LLH, LHH, HLH and HHH.

The core delivers all eight sub-bands together, up to one coefficient of
each per clock.

The main idea is that nothing larger than a few image rows is ever stored:

* Pixels arrive as narrow vertical strips (five pixels wide), one strip row
  per clock, for both frames at once.
* The horizontal (row) transform is finished across strip boundaries using
  three one-word-per-row memories.
* The vertical (column) transform runs on the row outputs as they come,
  using two-deep shift registers.
* The temporal Haar step needs no frame buffer, because both frames are
  processed in lock-step by two identical spatial processors.
* Every multiplication is replaced by shifts and adds. Every pipeline stage
  holds at most one adder, so the critical path is one adder.

The defaults are P = 2 processing units per row and column processor, and
frames of 3840 × 2160 (UHD). The datapath is a uniform 14-bit two's
complement word.

## Block structure

```
             pix0[5] ──► spatial_processor SP0 ──┐ LL LH HL HH (frame n)
in_valid ──►                                     ├──► 4 × haar_tp ──► l_frame[4], h_frame[4]
in_ready ◄── scan_ctrl ── ctl, en ──► both SPs   │
             pix1[5] ──► spatial_processor SP1 ──┘ LL LH HL HH (frame n+1)

spatial_processor:
  row_processor (2 × dwt_pu, 3 × row_mem) ─► 2 × transpose_reg ─►
  column_processor (2 × dwt_pu + shift registers) ─► rearrange_unit
```

| module | role |
|---|---|
| `dwt3d_pkg` | word type (14 bit), coefficient-with-valid type, slot control word |
| `dwt_pu` | nine-stage 1-D 9/7 lifting unit, shift-add constants |
| `row_mem` | one word per image row; three per row processor |
| `row_processor` | P chained PUs over one strip row per clock |
| `transpose_reg` | turns one PU's row-serial H/L outputs into vertical pairs |
| `column_processor` | P PUs on interleaved H/L column pairs |
| `rearrange_unit` | turns the interleaved CP outputs into four parallel sub-band streams |
| `spatial_processor` | one 2-D 9/7 DWT: RP → transpose → CP → re-arrange |
| `haar_tp` | three-stage lifting Haar across two frames |
| `scan_ctrl` | strip/row-slot counters, input handshake, stall and drain |
| `dwt3d_top` | two spatial processors, four temporal processors, the controller |

TP0 takes LL, TP1 LH, TP2 HL and TP3 HH. Output `l_frame[b]` and
`h_frame[b]` use the same band order.

## Feeding the core: strips, extension and the slot schedule

### The extended frame

The frame is first extended by one column on the right and one row at the
bottom. Both use symmetric extension: column `COLS` is a copy of column
`COLS-2`, and row `ROWS` is a copy of row `ROWS-2`. The data source
(normally an external frame memory, not part of this RTL) does this.

### Strips

Strip `s` covers columns `4s … 4s+4`, five pixels wide. Neighbouring strips
share one column. There are `COLS/4` strips.

For each strip, the source supplies rows `0 … ROWS` (including the extension
row), one row per accepted clock, on `pix0` (frame n) and `pix1` (frame n+1).
Strips go left to right.

### Handshake

The handshake is valid/ready:

* A strip row is taken in a clock where both `in_valid` and `in_ready` are
  high.
* `in_ready` is high only in *data slots*. A data slot is a slot that needs
  pixels (see below).

Assertions in `scan_ctrl` check these rules in simulation: an offered
row in a data slot is always taken, a stall happens only while no row is
offered, and the slot counters do not move during a stall.

### The slot schedule

`scan_ctrl` walks this schedule for every frame pair:

* Strips `s = 0 … COLS/4`. The last strip (`s = COLS/4`) is a **flush strip**
  and carries no pixels. It lets the first PU finish the rightmost column
  pair, whose left half was computed by the last PU in the previous strip.
* In each strip, row slots `r = 0 … ROWS+3`: the `ROWS+1` data rows, then
  **three idle slots** that let the column pipeline finish the bottom row
  pair before the next strip starts.

One frame pair therefore takes `(COLS/4 + 1) · (ROWS + 4)` clocks when the
source never waits. At 3840 × 2160 that is 2,079,604 clocks. The ideal
figure for this architecture is `COLS·ROWS/4` (2,073,600), so the overhead
is 0.3 %. At 200 MHz that is about 96 frame pairs per second, which is
about 3.2 times what 60 frames/s of UHD needs.

### Stall and drain

* **Stall.** If `in_valid` is low in a data slot after a frame has started,
  the whole datapath freezes (`en = 0`, `stall = 1`). Every register in the
  core has an enable, so nothing is lost.
* **Drain.** If the source has nothing at the start of a frame (slot 0 of
  strip 0), the core does not stall. It keeps clocking with empty slots, so
  the previous frame pair's results run out of the pipeline.

### End of frame and reset

`frame_done` pulses in the last slot of a frame pair.

The asynchronous active-low reset `rst_n` clears only the controller and
the valid-bit pipelines. Datapath registers are not reset; their contents
are ignored until real data reaches them.

## The processing unit

### The lifting equations

The 1-D 9/7 lifting scheme has four steps with coefficients α, β, γ, δ. In
the *flipped* form, each step is divided by its coefficient, so the
multiplier moves off the accumulation path. The four constants become:

| step | constant | value | shift-add form |
|---|---|---|---|
| 1 | a' = 1/α | -0.6305 | -(2⁻¹ + 2⁻³ + 2⁻⁷) = -0.6328 |
| 2 | b' = 1/(αβ) | 11.90 | 2² + 2³ = 12 |
| 3 | c' = 1/(βγ) | -21.378 | -(2⁴ + 2² + 1 + 2⁻² + 2⁻³) = -21.375 |
| 4 | d' = 1/(γδ) | 2.554 | 2¹ + 2⁻¹ + 2⁻⁴ = 2.5625 |

The final scaling is a right shift by 4 for the high band and by 5 for the
low band. These stand in for gains of about 0.0645 and 0.0378.

Each PU gets three consecutive samples `x0, x1, x2` at positions `c0, c0+1,
c0+2` (`c0` even). It also gets three neighbour partial results from the
unit handling the two samples below it. It computes:

```
H1(c0+1) = x0 + x2 + a'·x1                       stages 1-3
L1(c0)   = b'·x0     + H1(c0+1) + H1(c0-1)        stages 3-5
H2(c0-1) = c'·H1(c0-1) + L1(c0) + L1(c0-2)        stages 4-7
L2(c0-2) = d'·L1(c0-2) + H2(c0-1) + H2(c0-3)      stages 6-9
H = H2 >>> 4  (leaves after stage 8)
L = L2 >>> 5  (leaves after stage 9)
```

### Where each neighbour comes from

The neighbour values `H1(c0-1)`, `L1(c0-2)` and `H2(c0-3)` come from one of
three places:

* the PU to the left, in the row processor;
* the row memory, for the first PU of a strip;
* the same PU two clocks earlier, in the column processor.

Because of this arrangement, a PU outputs the coefficient pair *one
position pair behind* its inputs.

This is the least obvious part of the design. The flipped-lifting equations
as usually written take both neighbour terms of every step from the same
side, which does not give the 9/7 transform. The arrangement above does.
With exact constants it equals the textbook CDF 9/7 up to one constant gain
per band (about 0.870 for L and 1.150 for H).

### Pipeline timing

The nine stages are:

* stage 1: `shift_PE`;
* stages 2-3: α;
* stages 4-5: β;
* stages 6-7: γ;
* stages 8-9: δ.

Neighbour values are read at stages 4, 6 and 8. The PU's own partial
results for its neighbour leave from the registers of stages 3, 5 and 7.
L comes out one clock after H. The transpose register relies on this.

### Boundary controls

Three boundary controls are pipelined along with the data:

* `mir_h1` (first pair, `c0 = 0`) replaces `H1(-1)` by `H1(1)`.
* `mir_h2` (`c0 = 2`) replaces `H2(-1)` by `H2(1)`.
  These two give whole-sample symmetric extension at the left and top edges.
* `last` (the flush step at `c0 = N`) replaces the missing `L1(N)` by
  `L1(N-2)`. With the source's extension column or row, this is symmetric
  extension at the right and bottom edges.

## Row processor

PU `k` of the row processor gets strip pixels `2k, 2k+1, 2k+2`:

* PU 1 takes its neighbour partial results from PU 0.
* PU 0 takes them from the three row memories. The memories hold what PU 1
  left in the same row of the previous strip.
* Each memory is written at the stage where PU 1 produces the value and
  read at the stage where PU 0 needs it. The address is the row number
  carried along with the data.

A same-clock read and write of one address returns the old word. Each
memory is `ROWS+1` words deep, because the extension row also needs its
partial results.

Output positions: PU `k` in strip `s` produces coefficient column pair
`2s+k-1`. So:

* PU 0 of strip 0 has no real output (column pair -1).
* In the flush strip, only PU 0 has a real output.

## Transpose register and column processor

### Transpose register

The transpose register sits between row PU `k` and column PU `k`. Its job
is to turn "H of row r, L of row r-1" per clock into vertical pairs. It
has two registers (previous H, previous L) and two multiplexers.

* In the clock when H of an even row `r` arrives, it presents
  `(H(r-1), H(r))`.
* In the next clock, L of row `r` arrives, and it presents `(L(r-1), L(r))`.

The one-clock lag of L behind H is what makes two registers enough.

### Column processor

Each column PU therefore sees an H column on one clock and an L column on
the next. It runs two interleaved column transforms, each at two samples
per clock pair.

* Pair `m` holds rows `2m+1, 2m+2`.
* The third sample of the lifting triple (row `2m`) is the lower sample of
  the same column two clocks earlier. It comes from a two-deep shift
  register.
* The neighbour partial results also come from two-deep shift registers,
  one per stage boundary.

Pair `m` yields coefficient row `m-1`:

* The pair made of rows 0 and 1 only primes the registers.
* Pair `ROWS/2` is the bottom flush step, which uses the extension row.

The CP delays its H output by one clock, so that each PU emits
`(HL, HH)` and then `(LL, LH)` on alternate clocks.

## Re-arrange unit and output order

The re-arrange unit has one register on each output of column PU 1 and
four 2:1 multiplexers:

| clock | LL | LH | HL | HH |
|---|---|---|---|---|
| PUs deliver LL/LH | PU0 L | PU0 H | reg(PU1 L) | reg(PU1 H) |
| PUs deliver HL/HH | reg(PU1 L) | reg(PU1 H) | PU0 L | PU0 H |

This gives one coefficient of every band per clock.

Each band emits its coefficients in this order:

1. strip by strip (`s = 0 … COLS/4`);
2. within a strip, coefficient row by coefficient row;
3. within a row, column `2s-1` then column `2s`.

Columns outside `0 … COLS/2-1` are not emitted. Every output carries a
valid bit. A coefficient is flagged valid for exactly one clock, even when
the core stalls.

All eight outputs are valid in the same clock everywhere except near the
left and right frame edges. There, PU 0 (first strip) or PU 1 (flush strip)
has no real result.

## Temporal processor

`haar_tp` computes `L = (x0 + x1)/√2` and `H = (x1 - x0)/√2`. `x0` is from
frame n and `x1` from frame n+1. `1/√2` is approximated as
`2⁻¹ + 2⁻³ + 2⁻⁴ + 2⁻⁶ = 0.703125`. It has three register stages:

1. sum and difference;
2. two partial shift sums for each;
3. final add.

## Latency

Latencies are counted in enabled clocks:

* A strip row reaches the transpose registers after 8 clocks.
* The column processor adds 9.
* The temporal processor adds 3.

In a stall-free run, the first LL coefficient of a frame leaves the spatial
processor 23 clocks after the first strip row enters. The first 3-D
coefficient leaves 26 clocks after it, which is 22 clocks after the last
pixel row it depends on. The latency does not depend on the frame size.

The architecture this core implements is usually quoted at 18 clocks for
the 2-D part and 21 for the whole 3-D part. Three things add clocks here:

* the row pairing;
* the neighbour arrangement in the PU;
* the H/L alignment clock in the column processor.

## Arithmetic and accuracy

### Word width and shifts

Every node is a 14-bit two's-complement word and wraps on overflow. Right
shifts are arithmetic and truncate toward minus infinity. There is no
rounding.

### Pixel range

Because of the flipped constants, inner nodes grow to about 38 times the
input: L1 ≈ 14.7 × pixel, and the L2 node ≈ 38 × pixel. So the input range
must be limited:

* unsigned pixels of up to **7 bits** fit in 14 bits;
* 8-bit pixels overflow on bright flat areas.

To process 8-bit video, shift the pixels right by one, or raise `WORD_W` in
`dwt3d_pkg`. Everything, including the reference model of the testbenches,
follows that constant. The testbenches use 6-bit pixels.

### Accuracy of the shift-add constants

The shift-add constants are close, but the flipped form amplifies their
errors in the high band. Compared with an exactly scaled CDF 9/7 on random
8-bit rows:

* L coefficients come out within about 5 % of the ideal gain.
* Individual H coefficients can be off by up to about a third.

This is inherent in the chosen constants and scaling shifts, not an
implementation error. The testbenches check the hardware bit-exactly
against a model of these same fixed-point equations.

## Where this RTL departs from, or adds to, the original architecture

### Departures

* **Neighbour terms of the lifting steps** are taken as described above,
  because the published index form cannot yield the 9/7 transform. As a
  result, outputs lag inputs by one column pair.
* **Flush strip, three idle row slots per strip, and the extension row**
  are supplied by the source. The published description only extends the
  frame by one column and states a computing time of `N²/2P` per frame
  pair. Here it is `(COLS/4+1)(ROWS+4)`: for N = 64, 1156 instead of 1024
  clocks.
* **Row memory depth** is `ROWS+1`, not `ROWS`.
* **Column processor:** besides the two-deep shift registers for partial
  results, it has a two-deep input shift register and a one-clock H delay.
* **Temporal processor registers:** three register stages of 2 + 4 + 2
  words. The original counts six pipeline registers per temporal processor.
* **Latency:** 23 / 26 clocks instead of 18 / 21.
* **Scaling:** the shifts by 4 and 5 are used as drawn. They are not exact
  normalisation gains.

### Additions

These are choices not covered by the original description:

* the valid/ready input handshake;
* stall and drain;
* valid bits on all coefficients;
* reset of the control pipeline only;
* the 14-bit pixel input format.

### Not built

* **P other than 2.** The re-arrange unit is only described for P = 2, so
  the spatial processor refuses other values at elaboration.
* **Multi-level decomposition.** This would reuse the core with an external
  buffer for the LL band.
* **The external frame memory** that produces the strips.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `WORD_W` | 14 | `dwt3d_pkg` | datapath word width |
| `P` | 2 | top, SP, RP, CP, controller | PUs per row/column processor (only 2 supported) |
| `COLS` | 3840 | top, controller | frame width; multiple of 4 |
| `ROWS` | 2160 | top, SP, RP, controller | frame height; even; sets row memory depth |

`scan_ctrl` and `spatial_processor` check the parameter rules with
`$error` at elaboration.

At the defaults, the design has six 2161 × 14-bit row memories (181,524
bits) and about 4,150 flip-flop bits.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog. Expected values
come from `dwt_ref_pkg`, a whole-array model of the same fixed-point
equations. That model evaluates the lifting steps directly on arrays, with
its own boundary handling, and shares nothing with the RTL pipeline.

| testbench | what it shows |
|---|---|
| `tb_dwt_pu` | one PU run as a serial 1-D DWT on 32-sample lines; H after 8 clocks, L after 9 |
| `tb_row_mem` | random reads and writes, read-before-write |
| `tb_row_processor` | small frames with the real strip schedule, random enable gaps |
| `tb_transpose_reg` | pairing and alternation of H/L pairs |
| `tb_column_processor` | column transform on interleaved pairs, three runs |
| `tb_rearrange_unit` | band order and timing of the four streams |
| `tb_haar_tp` | Haar results and valid after 3 clocks |
| `tb_spatial_processor` | 2-D DWT of three 8 × 12 frames, first LL at 23 clocks |
| `tb_scan_ctrl` | schedule, handshake, stall and drain |
| `tb_dwt3d_top` | four 6 × 8 frame pairs with random input gaps |
| `tb_dwt3d_nxn` | three 64 × 64 pairs back to back |
| `tb_dwt3d_full` | one 3840 × 2160 frame pair at the default parameters |

`tb_dwt3d_top` checks all eight bands bit-exactly. It also checks the
26-clock latency and counts stalls, drains, left-edge strips, flush strips
and frame ends. It fails if any of these never happens.

`tb_dwt3d_nxn` checks that each frame pair takes exactly
`(N/4+1)(N+4)` clocks and that eight coefficients leave together.

`tb_dwt3d_full` needs about 600 MB of memory and well under a minute.

All testbenches pass. Each was also run against a deliberately broken copy
of its module, and each reported failures.

### Running a test with Verilator

To run a test, give the packages first:

```
verilator --binary --timing -Irtl --top-module tb_dwt3d_top \
    rtl/dwt3d_pkg.sv tb/dwt_ref_pkg.sv \
    rtl/dwt_pu.sv rtl/row_mem.sv rtl/row_processor.sv rtl/transpose_reg.sv \
    rtl/column_processor.sv rtl/rearrange_unit.sv rtl/spatial_processor.sv \
    rtl/haar_tp.sv rtl/scan_ctrl.sv rtl/dwt3d_top.sv tb/tb_dwt3d_top.sv
./obj_dir/Vtb_dwt3d_top
```

Lint with `verilator --lint-only -Wall -Irtl rtl/dwt3d_pkg.sv rtl/dwt3d_top.sv -y rtl`.
The design lints without warnings. The handshake assertions in `scan_ctrl`
are active in Verilator simulations by default.
