# A pipelined classical sampler for shallow graph-state circuits (FS2D HLF)

This RTL streams, one per clock, **every** solution of a 2D hidden linear
function (HLF) problem. It follows the two-stage scheme of "High-performance
parallel classical scheme for simulating shallow quantum circuits" (Zhang,
Bao, Sun, Li, Sun, Zhang).

An HLF instance is a symmetric binary n x n matrix A. A solution is a bit
string z in {0,1}^n with

    2 z.x = q(x) (mod 4)   for every x in Ker(A),   where q(x) = x^T A x (mod 4).

A constant-depth quantum circuit samples one random solution per run. This
is done by preparing the graph state of A and measuring each qubit in the X
or Y basis. Collecting all solutions that way takes about r 2^r runs, where
r is the binary rank of A. The classical scheme uses two facts instead:

* If z^a is one solution, then z^a XOR y is a solution exactly when y lies in
  the column space Col(A). Col(A) = Ker(A)^perp for a symmetric matrix.
* Col(A) has 2^r elements, namely A R for every R that is nonzero only on
  the positions P of r linearly independent columns ("pivots").

So the hardware finds P, r and one z^a once. It then walks R over the 2^r
patterns on P and outputs z = (A R) XOR z^a. The product A R is computed by
a shallow, fully local circuit, layer for layer the classical twin of the
quantum circuit's CZ and S layers. A full run therefore costs about
2^r clocks, against r 2^r quantum runs.

## The instance: an all-connected N x N grid

The grid is N x N, so n = N^2. Vertex v has row v / N and column v mod N
(0-based) and is bit v of every vector. The problem's usual 1-based vertex
i is bit i-1. A printed string z1 z2 ... zn therefore has z1 in bit 0.

* Off the diagonal, A is the fixed grid adjacency: A_uv = 1 exactly for
  nearest neighbours.
* The diagonal b (b_i = A_ii) is the instance, and it is the only input.

The grid's edges are split into four sets. Within a set no two edges share
a vertex, so all operations in a set can run at the same time:

| layer | colour | edges |
|-------|--------|-------|
| 0 | pink   | horizontal, columns (c, c+1) with c even |
| 1 | green  | horizontal, columns (c, c+1) with c odd  |
| 2 | orange | vertical, rows (r, r+1) with r even      |
| 3 | blue   | vertical, rows (r, r+1) with r odd       |

For N = 2 the green and blue sets are empty.

For an N x N grid the rank always lies between n - N and n. With b = 0 it
is exactly n - N.

## Stage 1: the CLA module (`cla_gf2`)

The CLA ("classical linear algebra") stage works on a copy of A in two
sequential phases of n clocks each.

1. **ELIM: Gauss-Jordan elimination over GF(2), one column per clock.**
   * For column c, a priority encoder finds the first row at or below the
     current rank with a 1 in column c.
   * That row is swapped into position `rank`. It is then XORed into every
     other row that has a 1 in column c.
   * Column c becomes a pivot. Its position is recorded in `pivot_mask` and
     in the per-row table `piv_col`.
   * If no row has a 1 in column c, the column is free and nothing changes.
2. **NULL: one column per clock; every free column f yields a kernel basis
   vector x_f.**
   * x_f has a 1 at f.
   * At each pivot position p_k it has reduced row k's bit in column f.
   * Everything else is 0.
   * q(x_f) mod 4 is computed in one clock as the sum, over the set bits i
     of x_f, of popcount(A_i AND x_f).

   On the kernel, q is always even, and it is linear mod 4. Among the basis
   vectors only x_f has a 1 at column f. So the string

       z^a[p] = 0 on pivots,  z^a[f] = q(x_f) / 2  on free columns

   satisfies all the kernel equations at once. This costs no extra solver.

The results are `pivot_mask` (P), `rank` (r) and `za` (z^a). The kernel basis
and its q values also appear on `ker_x`/`ker_q`, one vector per clock. The
whole stage takes 2n + 1 clocks: 51 clocks for the 5 x 5 grid.

The scheme itself calls for parallel O(log^2 n) algorithms here. It only
cites them and does not give them, so this is a plain sequential version
with the same results. In the original FPGA experiment this stage ran
offline, before the hardware run.

## Stage 2a: walking the column space (`pattern_gen`)

This stage is a counter register R_C^0 that an adder increments by one every
clock. Counter bit k is wired to the k-th pivot position of register R^0,
in ascending order. The other positions of R^0 are tied to 0.

In the original build the wiring was fixed for one instance's P. Here P
arrives at run time as a mask, so one netlist serves every instance.

The walk starts on a `start` pulse and stops by itself after 2^r strings.
The first string is in R^0 two clocks after `start`.

## Stage 2b: the classical parallel circuit (`parallel_circuit`)

Every vertex carries two wires: R_i (the "black" wire, the input string) and
y_i (the "red" wire), which starts at 0.

* **ROU layers (`rou_layer`, layers 0-3).** A rectangle operation unit sits
  on one edge (i, j) of the layer's colour. It is two classical CNOTs:
  y_i ^= R_j and y_j ^= R_i. R passes through unchanged.
  * After all four layers, y_i is the XOR of R over the neighbours of i.
  * This is the classical counterpart of the quantum circuit's four CZ
    layers, which share the same edge colouring.
* **Toffoli layer (`toffoli_layer`).** y_i ^= b_i AND R_i. Now y = A R
  exactly, diagonal included. This layer is the counterpart of the
  classically controlled S gates.
* **CNOT layer (`cnot_layer`).** z_i = y_i XOR z^a_i.

Each layer is a pipeline stage with a register behind it, numbered in the
style of the original FPGA schematic:

| register | after | N >= 3 | N = 2 |
|---|---|---|---|
| R^0 (input) | pattern generator | yes | yes |
| R^1, y^1 | pink layer   | yes | yes |
| R^2, y^2 | green layer  | yes | — |
| R^3, y^3 | orange layer | yes | yes |
| R^4, y^4 | blue layer   | yes | — |
| y (Toffoli) | Toffoli layer | yes | yes |
| Z | CNOT layer | yes | yes |

So an input string reaches Z after LATENCY = 6 clocks (4 for N = 2). This
matches the original's "5 levels" for N >= 3 and "3 levels" for 2 x 2, plus
the output register. Layers with no edges are generated as plain wires.

Every layer is one gate deep and purely local. Its size grows as O(n), and
its depth does not depend on n.

## Timing of one run (`hlf_solver`)

| phase | clocks |
|---|---|
| `start` to `cla_done` | 2n + 1 |
| `cla_done` to first solution | LATENCY + 2 = 8 (6 for N = 2) |
| solutions, one per clock, `z_valid` high | 2^r |

`done` pulses with the last solution. The streaming part is the scheme's
T_F = Δt (τ + 2^r). At 100 MHz the paper's instances give the following:

| grid | b | r | 2^r | stream time |
|---|---|---|---|---|
| 2x2 | 0000 / 1011 / 1111 | 2 / 3 / 4 | 4 / 8 / 16 | < 0.3 µs |
| 3x3 | 0^9 / 0^8 1 / 0^7 11 | 6 / 7 / 8 | 64 / 128 / 256 | ≤ 2.6 µs |
| 4x4 | 0^16 / 0^15 1 / 0^14 11 | 12 / 13 / 14 | 4096 … 16384 | 41 / 82 / 164 µs |
| 5x5 | 0^25 / 0^24 1 / 0^23 11 | 20 / 21 / 22 | 2^20 … 2^22 | 10.5 / 21 / 42 ms |

These stream times agree with the reported FPGA run times of 0.04, 0.08 and
0.16 ms (4x4) and 0.01, 0.02 and 0.04 s (5x5).

A netlist is built for one grid size N. A 4 x 4 instance needs the design
built with N = 4, because a smaller grid is not a sub-grid of the 5 x 5
graph: its border vertices have fewer neighbours.

## Top-level interface

`hlf_solver #(N = 5)`:

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst | in | 1 | clock; synchronous active-high reset |
| start | in | 1 | pulse: solve instance b (ignored while busy) |
| b | in | n | diagonal of A; hold steady until `done` |
| busy | out | 1 | run in progress |
| cla_done | out | 1 | P, r, z^a valid from here on |
| rank, pivot_mask, za | out | | r, P, z^a |
| ker_valid, ker_x, ker_q | out | 1, n, 2 | kernel basis vectors and q(x), during the CLA run |
| z_valid, z | out | 1, n | one solution per clock |
| done | out | 1 | high with the last solution |

Modules, bottom-up:

* `hlf_pkg`: default N and the grid-geometry functions (layer partners,
  adjacency).
* `rou_layer`, `toffoli_layer`, `cnot_layer`: the three kinds of layer.
* `parallel_circuit`: the layers chained into the pipeline.
* `pattern_gen`: the walk over the pivot patterns.
* `cla_gf2`: the CLA stage.
* `hlf_solver`: the top.

At N = 5 the top synthesizes to about 1200 word-level cells and 1230
flip-flops. The CLA module accounts for most of both, because it holds two
copies of the 25 x 25 matrix.

## Verification

Each module has a self-checking testbench in `tb/`. All of them compare
against `hlf_ref_pkg`, an independent reference. That package computes A R
row by row, finds ranks with its own elimination, and tests a candidate z^a
against the HLF equations: over all x for n ≤ 16, over a kernel basis for
larger n.

* `tb_rou_layer`, `tb_toffoli_layer`, `tb_cnot_layer`: random data through
  each layer. The ROU test checks all four colours separately, and also
  chained (y must equal the neighbour XOR).
* `tb_parallel_circuit`: random instances and input streams at N = 5 and
  N = 2. It checks z = A R XOR z^a and the exact latency.
* `tb_pattern_gen`: random pivot masks. It checks the scatter order, the
  count 2^r, back-to-back output and the start delay.
* `tb_cla_gf2`: N = 2, 3, 4, 5 on the paper's instances and on random ones.
  It checks the rank against the printed values, that the pivots are
  independent, the kernel vectors and their q, that z^a is a solution, and
  the 2n + 1 clock latency.
* `tb_hlf_solver`: the whole solver at N = 2, 3 and 4, about 80 000
  solutions, each checked, with timing.
  * For 2 x 2 the solution sets are compared with the sets printed in the
    paper: {0000, 0110, 1001, 1111} for b = 0000, and the eight strings for
    b = 1011.
  * It counts rank-deficient and full-rank instances, Toffoli firings and
    CNOT-layer flips, and fails if any of them never happened.
* `tb_hlf_full`: the default 5 x 5 build on the paper's three 5 x 5
  instances. All 7 340 032 solutions are streamed and checked. This takes
  about 1.5 minutes of simulation.

To run one of them with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/hlf_pkg.sv tb/hlf_ref_pkg.sv tb/tb_hlf_solver.sv \
        --top-module tb_hlf_solver -Mdir obj -o sim && ./obj/sim

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
through a watchdog if it hangs.

## Where this RTL departs from the original scheme

* **CLA algorithm.** The CLA here is sequential (2n + 1 clocks), not the
  cited O(log^2 n) parallel method. It is also on chip, whereas the original
  experiment computed P and z^a offline and fed z^a in as an input.
* **Pattern generator.** It takes P as a run-time mask and stops after 2^r
  strings. The original build was rewired per instance and let the counter
  run, observed by an on-chip logic analyzer. The analyzer is not part of
  this RTL; `z`/`z_valid` are where one would attach.
* **Initial y.** The all-zero initial y comes straight from a constant. The
  original used a constant register feeding latches y^0.
* **Own choices.** Reset values, the valid bits travelling with the data,
  the start/busy/done handshake and the choice of which solution z^a to
  output (zero on the pivots) are this design's own.
* **Scope.** Only the all-connected 2D grid is built. The scheme extends to
  any graph through a deeper edge colouring, but that is not done here.

## Changing it

* N is the only parameter. Every layer, the counter and the CLA scale with
  it.
* The CLA holds an n x n matrix, and its per-clock elimination step is a
  wide XOR network. Its area therefore grows as n^2, while the parallel
  circuit grows as n.
* The counter is n bits wide, so any rank up to n is handled.
* The reference package in `tb/` uses 64-bit vectors, so the testbenches
  support N ≤ 8.
* Another edge colouring (another graph) would mean changing
  `hlf_pkg::partner` and `layer_used`, and `grid_adjacent` for the CLA's
  copy of A.
