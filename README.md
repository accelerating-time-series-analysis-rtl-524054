# MATSA: subsequence DTW computed inside MRAM crossbars

This is a SystemVerilog model of an accelerator that finds how closely short
query time series match anywhere inside a long reference time series. The
similarity measure is subsequence Dynamic Time Warping (sDTW). sDTW needs
about `ref_size x query_size` cell updates per query, and each update does
very little arithmetic. A processor spends most of its time moving data for
it. This design does not move the data: the arithmetic happens in the memory
arrays where the data is stored. The arrays are crossbars of magnetic
(SOT-MRAM) cells. Every bit line of a crossbar, together with its sense
amplifier, is a one-bit processor, and thousands of them work in parallel.

The RTL covers the whole digital part of such a chip:

- the sense amplifiers as Boolean units;
- the compute and memory crossbars as arrays;
- the micro-programmed subarray controllers that turn sDTW into row
  operations;
- the controller that pipelines queries through a chain of subarrays;
- the chip controller that takes a host request and collects the distances.

The default parameters give the small "Embedded" configuration:

| Part | Count |
|---|---|
| Compute crossbars (256x256 cells) | 128 |
| Memory crossbars (256x256 cells) | 896 |
| MATs | 16 |
| Compute subarrays per MAT | 8 |
| Memory subarrays per MAT | 56 |

## The recurrence being computed

For a query `Q[0..N-1]` and a reference `R[0..M-1]`, with `d(a,b) = |a-b|`:

```
S[0][j] = d(Q[0], R[j])                                   (a match may start anywhere)
S[i][j] = d(Q[i], R[j]) + min(S[i-1][j-1], S[i-1][j], S[i][j-1])   for i > 0
          (S[i][-1] = infinity)
distance(Q) = min_j S[N-1][j]                             (a match may end anywhere)
```

The series are int32 values. Distances and S values are unsigned 32-bit
integers: sums are taken modulo 2^32, comparisons are unsigned, and
"infinity" is `0xFFFF_FFFF`. A host that keeps its data so that distances stay
below 2^31 never sees the wrap-around. The self-checking testbenches compute
exactly this recurrence in software and compare every distance.

## Bit-serial processing in a crossbar column

A compute subarray (`matsa_compute_subarray`) is a 256x256 array of one-bit
cells with a row of reconfigurable sense amplifiers (`matsa_rsa`) under it.
Numbers are stored vertically: a 32-bit value lives in 32 consecutive rows
of one column, least significant bit in the lowest row. The same row map is
used in every column. So one micro-operation (activate some rows, sense,
write one row) does the same one-bit operation in all 256 columns at once.

Row map of a compute subarray (`matsa_pkg`):

| rows    | contents |
|---------|----------|
| 0-31    | `Q`: the query element currently in this column |
| 32-63   | `SDD` = S[i-1][j-1] |
| 64-95   | `SU`  = S[i-1][j] |
| 96-127  | `SL`  = S[i][j-1] |
| 128-159 | `S`   = S[i][j], the value being computed |
| 160-191 | `R`: the reference element of this column |
| 192-223 | `BEST`: running minimum of the last query row |
| 224-238 | carry, temporaries, compare flags, sign, constant 0, and the flags FIRST, LAST, VALID, NFIRST, G |

The sense amplifier turns a multi-row activation into logic. If one, two or
three cells of a column are activated, the bit-line level depends on how many
of them hold a 1. The model reduces the analog threshold to a count of those
cells:

| Function | Threshold (count of 1-cells) |
|---|---|
| read | >= 1 |
| OR | >= 1 |
| AND | >= 2 |
| majority of three | >= 2 |

For addition the two amplifiers sense OR and AND of two cells together. Their
difference is the XOR, and that is XORed with the carry held in the
amplifier's latch. So one bit of `a + b` costs two micro-operations:

- **Sum** writes `a ^ b ^ c`.
- **Carry** writes `MAJ(a, b, c)` into the carry row and the latch.

An optional inverter lets a subtraction use `a + ~b + 1`.

The latch also makes the **diagonal copy**, which is how data moves
sideways. One micro-operation reads a row into every column's latch. The
next writes the row back, but each column writes the value latched by its
*left* neighbour. The row has then moved one column to the right. The last
column's latch leaves the subarray on `dc_out` and becomes the next
subarray's `dc_in`. A chain of subarrays therefore behaves as one long row
of columns.

## One wavefront step

`matsa_subarray_ctrl` holds the micro-programs. It sends one micro-operation
per clock to its subarray: rows to activate, sense function, inversion,
latch enable, diagonal-copy select and destination row. The main program,
`PROG_STEP`, makes every column compute one sDTW cell and then shift the
data it passes on. Its phases, all bit-serial, run in this order:

1. **Distance.**
   - Compute `Q + ~R + 1` and keep the sign of `Q - R`.
   - Take the absolute value: XOR every bit with the sign, then add the sign.
   - The sign is bit 31 of the difference. Q and R are therefore read as
     int32, and `|Q-R|` is exact while the difference fits in 32 bits.
2. **Minimum of three, without storing it.**
   - Compare `SDD` with `SU` using a subtraction's carry chain. The
     difference bits are thrown away; only the final borrow is kept, as
     flag `F1` with its inverse `NF1`.
   - Compare the smaller of the two, selected bit by bit through `F1`, with
     `SL`. The result is flag `F2` with inverse `NF2`.
   - The minimum itself is never written to the array.
3. **Add.** Add the minimum to `S`. Each bit of the minimum is rebuilt on the
   fly from the flags as AND/OR terms. The term is forced to 0 where
   `FIRST` is set, which gives `S[0][j] = d(Q[0], R[j])`.
4. **BEST.** In columns where both `LAST` (the query's final element) and
   `VALID` (the column holds a real reference element) are set, the step
   replaces `BEST` with `min(BEST, S)`.
5. **Moves.** Then come the data moves:
   - diagonal copy `S -> SL`;
   - diagonal copy `SU -> SDD`;
   - vertical copy `S -> SU`;
   - diagonal copy of `BEST`;
   - diagonal copy of `Q`, `FIRST` and `LAST`.

Why the moves give the right neighbours: after the shift, column `j` holds

- S[i][j-1], which was column j-1's new value;
- S[i-1][j-1], which was column j-1's previous value;
- S[i-1][j], its own previous value.

The next query element, arriving from the left, needs exactly these. The
cycle counts of the programs are fixed:

| Program | Cycles |
|---|---|
| `PROG_INIT` | 38 |
| `PROG_LOADR` | 66 |
| `PROG_SHIFT` | 69 |
| `PROG_STEP` | 1236 |

`tb_matsa_subarray_ctrl` checks these counts.

At the left edge of the chain the MAT controller feeds all-ones into `SL`,
`SDD` and `BEST`. These are the "infinity" boundary values.

## The wavefront in a MAT

`matsa_mat` groups NSA compute subarrays, their controllers and NMEM memory
subarrays (`matsa_mem_subarray`). It is run by `matsa_mat_ctrl`. The compute
subarrays are chained through their latches, giving `K = NSA*256` columns.
By default `K = 2048`.

- **Reference.**
  - The reference is stationary: column `j` holds `R[j]`.
  - It gets there by `K` `PROG_LOADR` programs. Each shifts the R rows and
    the VALID flag one column right and feeds a new element at column 0, in
    reverse order.
  - Columns past the end of a short reference get VALID = 0 and never
    contribute to BEST.
- **Queries.**
  - Query elements enter column 0 one per step and travel right one column
    per step. Column `j` therefore computes cell `(i, j)` one step after
    column `j-1` computed `(i, j-1)`: the anti-diagonal wavefront.
  - Queries follow each other with no gap. FIRST and LAST travel with the
    elements and tell each column where one query ends and the next begins.
  - A run of `nq` queries of length `N` takes `nq*N + K - 1` steps. The last
    `K - 1` steps feed bubbles.
- **Results.**
  - BEST travels with the query's last element and collects
    `min_j S[N-1][j]` on its way across the chain.
  - When LAST falls off the far end, the controller has captured BEST bit by
    bit from `dc_out`, and it offers `(local query number, distance)` on a
    valid/ready port.

The controller's stream is `S_FETCH -> S_LATCH -> S_GO -> S_RUN -> S_RESULT`:

1. `S_FETCH` reads a memory row.
2. `S_LATCH` picks the element.
3. `S_GO` waits for the chip-wide `advance`.
4. `S_RUN` runs the program.
5. `S_RESULT` hands out a result, if one left the chain.

A step therefore costs the 1236 cycles of the program plus a few cycles of
handshake.

Query elements are read from memory subarrays 1.. in query-major order. In
**self-join** mode the queries are the windows `R[w .. w+N-1]` of the
reference itself. They are read from memory subarray 0, and a window is also
compared with itself (trivial matches are not excluded).

## The chip: replication, lock step and result arbitration

`matsa_global_ctrl` is the host-facing controller. `matsa_top` joins it to
NMATS MATs.

- **Configuration.**
  - The `cfg_*` inputs carry mode, metric, reference size, query length,
    number of queries and anomaly threshold. They are latched on `cfg_we`.
  - `cfg_err` marks a request this hardware cannot run:
    - the squared-difference metric;
    - a reference longer than `K`;
    - more query data than the memory subarrays hold;
    - self-join windows that run past the reference;
    - a query length of 0.
  - `start` is ignored while `cfg_err` is high.
- **Loading.**
  - The `in_*` stream carries the reference, which is written to every MAT
    at once.
  - It then carries the queries. Query `q` goes to MAT `q mod NMATS`.
  - Every MAT thus holds the whole reference and a share of the queries
    (in self-join, windows `m, m+NMATS, ...`).
- **Lock step.**
  - `advance` is raised only when every unfinished MAT is waiting for it and
    no MAT holds an untaken result.
  - So all MATs start each program together. A consumer that holds
    `out_ready` low stalls the whole chip instead of losing results.
  - MATs with fewer queries finish early and drop out of the condition.
- **Results.**
  - Results are taken round robin among the MATs that offer one. Several
    offer one in the same step whenever queries of equal length leave their
    chains together.
  - `out_qid = local_number * NMATS + mat` gives the global query (or
    window) number.
  - `out_anomaly = out_dist > threshold`.

## Simulating it

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_matsa_top \
          -y rtl -y tb +libext+.sv rtl/matsa_pkg.sv tb/tb_matsa_top.sv
./obj_dir/Vtb_matsa_top
```

| testbench | what it covers |
|---|---|
| `tb_matsa_rsa` | every sense function, inversion, latch and diagonal-copy path; a 16-bit bit-serial addition through Sum and Carry |
| `tb_matsa_compute_subarray` | row reads and writes, vertical and diagonal copy (including `dc_in`/`dc_out`), AND, majority, write priority |
| `tb_matsa_subarray_ctrl` | one `PROG_STEP` on a 64-column subarray with random operands and flags: new S, every copy, BEST and the shifted flags in every column; the length of every program |
| `tb_matsa_mem_subarray` | word writes and row-buffer reads |
| `tb_matsa_mat` | one MAT (2 subarrays of 64 columns): query filtering and self-join against software sDTW, step count, stall |
| `tb_matsa_top` | 3 MATs of 128 columns end to end. It counts stalls, arbitration, early-finishing MATs, anomalies, normal results and a refused configuration, and fails if any never occurs |
| `tb_matsa_top_full` | the chip at its default size: a 2048-element reference, 16 queries of 4 elements, every distance checked, and 2051 steps per MAT. About 5 minutes in Verilator |

The small configurations are the same RTL with smaller `NSA`, `NMEM`,
`COLS` and `NMATS`. Nothing in the logic depends on the crossbar being 256
wide, except that a memory row must hold at least two 32-bit words
(`COLS >= 64`).

## Where this departs from the published design, and what is missing

- **Long references are not batched.** A reference must fit in one MAT's
  chain: 2048 elements at the defaults. Every evaluated data set uses
  longer references (8K to 1.8M elements), so none runs unchanged on this
  RTL. The published design handles them by processing the reference in
  sequential batches. That needs a second pass over partial results, and
  its control is not specified closely enough to build.
- **Only the absolute difference is built.** The squared difference would
  need a bit-serial multiplier program, which is not described. A request
  for it is refused through `cfg_err`.
- **All queries of a run have one length.** The published host call takes
  a size per query. Here `cfg_qlen` applies to every query, so queries of
  different lengths need separate runs.
- **Only 32-bit data.** Elements are int32, and the S values wrap modulo
  2^32. Other element widths are not built.
- **The split of the chip into 16 MATs of 8 compute and 56 memory
  subarrays is a choice.** Only the totals of 128 and 896 crossbars are
  given. Banks, the global row decoder and buffers, and the host link are
  not modelled. The chip controller talks directly to the MATs.
- **The memory cells are ideal.** The MRAM cell, its write current and
  latency, and the analog sensing margins are outside the RTL. The
  sense-amplifier threshold is a count of ones. Energy and timing in
  nanoseconds are therefore not modelled; one micro-operation takes one
  clock cycle.
- **The micro-operation lists are this design's own.** This covers the flag
  rows, BEST, the infinity constant and the reference-loading procedure.
  The published design gives the operations and their order, but not the
  row-level sequences.
