# A streaming, superscalar conjugate-gradient solver for the 2D Laplace equation

This RTL solves the linear system that comes from the 5-point finite-difference
Laplacian on an N x N grid with zero Dirichlet boundary:

    (A u)(i,j) = 4 u(i,j) - u(i-1,j) - u(i+1,j) - u(i,j-1) - u(i,j+1) = b(i,j)

It never stores A. Every matrix-vector product is a stencil applied to a
stream of grid values. The solver is built around two ideas.

1. **A pipelined CG variant.** The solver does not use textbook conjugate
   gradients. It uses a reformulation in which the residual norm (r,r), the
   product (w,r) and the next matrix-vector product n = A w all read the same
   two vectors, r and w. One streamed pass over memory therefore does all of
   the expensive work of an iteration. In textbook CG the dot product
   (p, A p) must wait for the SpMV to finish.
2. **Superscalar lanes on a 2D decomposition.** The grid is split into
   F = V x H sub-grids, and F identical pipelines work on them in lock step.
   The sub-grids are grouped into 2 x 2 *quadruples*. Each sub-grid is
   streamed starting from the corner where its quadruple's four sub-grids
   meet. Because of this mirrored traversal, every lane needs its boundary
   ("halo") data at the same moment its neighbours produce it. The halo
   exchange is therefore a per-cycle selection between lanes, with no
   buffering.

At the default size (N = 100, so 10 000 unknowns, and 16 lanes as 4 x 4
sub-grids of 25 x 25), one iteration takes 1533 clock cycles. A 120-iteration
solve, including the initial pass, takes 185 346 cycles. Published results for an HLS implementation of the
same method give about 181 000 cycles for the same size and iteration count.

## 1. The iteration

The vectors are x (solution), r (residual), w = A r, p, q = A p, z = A q and
n = A w. All seven are kept in on-chip banks (section 2). Starting from x = 0,
r = b:

    init:     w = A r;  x = p = q = z = 0
    repeat:
      phase A  gamma = (r,r)   delta = (w,r)   n = A w        one pass over r, w
      check    stop if gamma <= tol, or after max_iter iterations
      scalar   first iteration:  beta = 0,  alpha = gamma / delta
               later:            beta = gamma / gamma_old
                                 alpha = gamma*alpha_old / (delta*alpha_old - beta*gamma)
      phase B  p = r + beta p    q = w + beta q    z = n + beta z      (axpy set 1)
               x = x + alpha p   r = r - alpha q   w = w - alpha z     (axpy set 2)

Phase B reads all seven vectors at one address per cycle. It writes p, q, z
two cycles later and x, r, w three cycles later, back to the same address, so
the update is in place. Because p, q and z start at zero and beta is zero on
the first iteration, the first iteration needs no special data path. Only the
scalar unit treats it differently.

The formula for alpha, with two divisions, is the one in the published
data-flow diagram. The published algorithm listing writes the same quantity
as 1/(delta/gamma - beta/alpha_old), which needs four divisions. The listing
also writes the r and w updates with a plus sign. The diagram and the
mathematics of the method use a minus sign, and so does this RTL.

## 2. Sub-grids, quadruples and the mirrored traversal

This is the part of the design that is least obvious.

Sub-grid (a, b), with a in 0..V-1 and b in 0..H-1, is lane l = a*H + b. It
holds SV = N/V rows and SH = N/H columns. Sub-grids (2i, 2j), (2i, 2j+1),
(2i+1, 2j) and (2i+1, 2j+1) form one quadruple. Inside a sub-grid, local row
0 and local column 0 are the row and column that touch the quadruple's middle
corner:

    global row    = a even ? a*SV + SV-1 - i : a*SV + i        (local row i)
    global column = b even ? b*SH + SH-1 - j : b*SH + j        (local column j)

A vector is stored as F banks (`vector_bank`), one per lane. Local point
(i, j) is at address i*SH + j. Streaming a sub-grid in address order walks
away from the quadruple centre, row by row.

For the stencil, each lane needs its sub-grid surrounded by one ring of
padding, so (SV+2) x (SH+2) words. The mirror symmetry gives every padding
cell at the same bank address in one neighbour:

| padded position | source | bank address |
|---|---|---|
| row -1 | the sub-grid across the quadruple's middle row (a xor 1) | local row 0 |
| row SV | the sub-grid in the next quadruple (a-1 if a even, a+1 if odd), or 0 at the domain edge | local row SV-1 |
| column -1 | the sub-grid across the quadruple's middle column (b xor 1) | local column 0 |
| column SH | the sub-grid in the next quadruple, or 0 at the domain edge | local column SH-1 |
| corners | not used by a 5-point stencil | driven to 0 |

So `halo_exchange` walks the padded positions (pi, pj) in row-major order and
reads all F banks at one address: pi and pj clamped into the sub-grid. Each
lane then takes its own word or a neighbour's word, chosen by which region
(pi, pj) lies in. No lane ever waits for another, and no halo buffer exists.
A pass takes (SV+2)(SH+2) cycles.

The published design traverses the grid in the same quadruple-centred way,
but drawings of its copy step show small buffers between sub-grids. The
same-address crossbar is this implementation's way of doing that copy.

There is a check on this. Published padding latencies for the 2D scheme equal
(N/V+2)(N/H+2) + 5 for every grid size and lane count listed (for example
27*27 + 5 = 734 for N = 100 with 16 lanes, and 27*52 + 5 = 1409 with 8 lanes
as 4 x 2). Phase A here takes exactly that long.

Constraints: V and H must be even, since quadruples are 2 x 2. F = V*H must be
a power of two for the adder tree. N must be divisible by V and by H.

A host that loads b or reads x must use the same mapping: lane = a*H + b,
address = i*SH + j, with (i, j) from the formulas above. `tb/tb_ref_pkg.sv`
has it as the function `grow`.

## 3. The datapath blocks

* **`stencil_lane`**: three line buffers, each the padded sub-grid width, and
  a 3 x 3 window of shift registers. When a word arrives at column c, column c
  of the line buffers moves up one line and the new word enters the last line.
  That column then enters the window's last column while the window shifts
  left. The stencil (4*centre minus four neighbours) is then applied with
  shifts and subtractions. The three register stages give a result on the
  second edge after the word that completes its window. A result is emitted
  only when the window is centred on an interior point, so the output is the
  sub-grid's SV*SH values in bank order.
* **`spmv`**: one `halo_exchange` feeding F `stencil_lane`s, plus the result
  address counter. It also exports which cycles carry the lane's own
  (interior) words, so that the two dot products can use the same bank read.
* **`dot_product`**: F multipliers, a log2(F)-level adder tree and an
  accumulator. Its latency from the last element to the result is
  log2(F) + 2 cycles.
* **`axpy`**: S = A + alpha*B on F lanes, one register stage. Subtractions
  pass -alpha.
* **`scalar_unit` / `fx_divider`**: beta and alpha as in section 1. One
  sequential restoring divider (one bit per cycle, 81 cycles per division) is
  shared by both divisions.
* **`vector_bank`**: F memories with one shared read address (registered
  read, one cycle) and one shared write address with a per-lane enable.
* **`newcg_top`**: seven banks, the SpMV, two dot products, the scalar unit,
  six axpy units and the sequencer.

## 4. Number format

Every value is signed fixed point <50,20>: 50 bits, of which 20 are integer
bits (sign included) and 30 are fraction bits (`cg_pkg`). Products are rounded
half up at the last fraction bit. Every sum and product saturates at the type's
limits. Division truncates toward zero and saturates, and division by zero
returns the extreme value with the dividend's sign. Integer range is about
+-524 288 and resolution is 2^-30. Keep b, and therefore (r,r), within that
range. (r,r) for a 100 x 100 grid with |b| <= 1 is at most 10 000.

Because fixed-point addition is associative, the adder tree may sum the F lanes
in any order without changing the result. The testbenches model the
arithmetic bit for bit.

## 5. Timing

| phase | cycles |
|---|---|
| init (w = A r), once | (SV+2)(SH+2) + 5 |
| phase A | (SV+2)(SH+2) + 5 (734 at default) |
| check | 1 |
| scalar | 86 on the first iteration (one division), 170 later (two) |
| phase B | SV*SH + 3 (628 at default) |

Phase B is not overlapped with the next phase A. The dot products finish a
few cycles before the SpMV. The scalar step is a true stall: both dot products
must be complete before beta and alpha exist.

## 6. Interface of `newcg_top`

Parameters are `N` (default 100), `V` and `H` (default 4 and 4, giving 16 lanes).

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `ld_we`, `ld_lane`, `ld_addr`, `ld_data` | in | write one word of b (into r) while idle |
| `rd_lane`, `rd_addr` / `rd_data` | in / out | read one word of x while idle; data one cycle later |
| `start` | in | pulse: solve with the loaded b |
| `max_iter` (16 b), `tol` | in | iteration limit; stop when (r,r) <= tol |
| `busy`, `done` | out | solving; one-cycle pulse at the end |
| `converged` | out | the tolerance stopped the solve |
| `iter_count`, `gamma` | out | iterations done; last (r,r) |

A solve overwrites r, so b must be loaded again before each new solve.

## 7. Departures from the published design

* The published implementation is HLS C with streams between stages. Here the
  vectors live in banks between iterations. The banks, the host ports and the
  stopping rule (limit plus tolerance) are this design's own.
* Phase B does not overlap the next phase A.
* The halo copy is the same-address crossbar of section 2, not buffers.
* Divider structure, rounding of division, reset behaviour and handshakes are
  not specified by the source and were chosen here.
* Only the pipelined CG variant with 2D decomposition is built. Textbook CG
  and 1D decomposition appear in the source only as points of comparison.
  Configurations with 1 or 2 lanes cannot be split into quadruples and are
  not supported.
* A 120-iteration solve at the default size takes 185 346 cycles against
  about 181 000 published (2 % more). The shared bit-serial divider accounts
  for 170 cycles of each 1533-cycle iteration. Resource figures (DSP, LUT) are not comparable,
  because this is plain RTL, not HLS output.

## 8. Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_ref_pkg` holds the reference fixed-point
arithmetic and the grid mapping that the testbenches use.

| testbench | what it checks |
|---|---|
| `tb_vector_bank` | random per-lane writes and reads |
| `tb_halo_exchange` | every padded word of 16 lanes on a 12 x 8 grid, with intra- and inter-quadruple copies and the zero edge |
| `tb_stencil_lane` | stencil values, saturation, latency, gaps in the stream |
| `tb_spmv` | A*w against the global Laplacian, write addresses, pass length |
| `tb_dot_product` | bit-exact sums, latency log2(F)+2, gaps, saturation |
| `tb_axpy` | bit-exact, negative alpha, saturation, latency 1 |
| `tb_scalar_unit` | alpha and beta over sequences of iterations, division by zero |
| `tb_newcg_top` | N = 16, 4 x 4 lanes; see below |
| `tb_newcg_full` | default size, 120 iterations, about 15 s of simulation |

`tb_newcg_top` runs one solve that stops at an iteration limit and compares x
with textbook CG in double precision after the same number of iterations. It
then runs a solve that stops at a tolerance and checks the true residual
|b - A x|^2. It also checks that every mechanism occurred: the first-iteration
and later scalar paths, inner and inter-quadruple copies, the stall on the
scalars, and both stop conditions. `tb_newcg_full` does the same at
N = 100 with 16 lanes and checks that an iteration is within 10 % of the
published 1508 cycles.

`tb_newcg_workloads` runs all eight published configurations that quadruples
can hold, side by side, each on its own solver instance (`tb/newcg_run.sv`).
It takes about 30 s. Each run compares (r,r) after every iteration with
double-precision CG (within 1 %), compares x, and checks the cycle count
against the published one (within 25 %). The results:

| N | lanes (V x H) | iterations | cycles here | published |
|---|---|---|---|---|
| 16 | 4 (2 x 2) | 33 | 11 448 | 10k |
| 32 | 4 (2 x 2) | 60 | 46 117 | 42k |
| 32 | 8 (4 x 2) | 60 | 29 509 | 26k |
| 40 | 4 (2 x 2) | 80 | 85 937 | 81k |
| 40 | 8 (4 x 2) | 80 | 51 897 | 47k |
| 40 | 16 (4 x 4) | 80 | 34 057 | 29k |
| 100 | 8 (4 x 2) | 120 | 342 697 | 344k |
| 100 | 16 (4 x 4) | 120 | 185 347 | 181k |

On small grids the fixed 170-cycle scalar step is a larger share of each
iteration, so the gap to the published figures widens to 10-17 %. (The
N = 100 count is one cycle more than in `tb_newcg_full`, because the two
testbenches start counting one clock edge apart.)

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

    RTL="rtl/cg_pkg.sv rtl/vector_bank.sv rtl/halo_exchange.sv rtl/stencil_lane.sv \
         rtl/spmv.sv rtl/dot_product.sv rtl/axpy.sv rtl/fx_divider.sv \
         rtl/scalar_unit.sv rtl/newcg_top.sv"
    verilator --binary --timing --assert -Irtl -Itb $RTL tb/tb_ref_pkg.sv \
        tb/tb_newcg_top.sv --top-module tb_newcg_top
    ./obj_dir/Vtb_newcg_top

Replace the last file and the top name to run any other testbench. For
`tb_newcg_workloads`, also add `tb/newcg_run.sv`. The package files must come
first and must each be given only once.
