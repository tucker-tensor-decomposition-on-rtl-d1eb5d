# A HOOI engine for Tucker decomposition

Tucker decomposition approximates a d-way tensor X (I_1 x ... x I_d) by a
small core tensor G (R_1 x ... x R_d) multiplied along every mode by a
factor matrix A_k (I_k x R_k) with orthonormal columns. The standard
algorithm is HOOI (higher-order orthogonal iteration). For each mode k it
projects X on all the other factor matrices and then takes the leading
R_k left singular vectors of the mode-k unfolding of the result as the new
A_k. Two kinds of work dominate:

* tensor-times-matrix products (TTM), Y = X x_j A_j^T, on tensors far too
  large for on-chip memory;
* an SVD of a matrix with I_k rows per mode and iteration.

This RTL builds HOOI from three datapaths that share a DRAM port and an
on-chip memory, plus a small command sequencer:

* a **TTM unit**, a Q x R array of multiply-accumulate PEs. It multiplies
  the tensor in place in DRAM, in whatever mode, without first permuting it;
* an **SVD unit** that runs one-sided (Hestenes) Jacobi rotations on P
  lanes. The rows of the matrix being orthogonalised are pipelined through
  CORDIC angle and sine/cosine units;
* a **permute unit** that moves the projected tensor from DRAM into the
  on-chip memory as a mode unfolding, and moves factor matrices both ways.

The key idea at the algorithm level is the **warm start**. The SVD does
not start from the identity. It starts from the factor matrix of the
previous HOOI iteration U_k: the matrix handed to it is
B = U_k^T Y_(k), and its U part is loaded with U_k. Once HOOI starts to
converge, U_k is already almost right and B is almost row-orthogonal, so
one or two Jacobi sweeps per SVD are enough instead of about ten.

Defaults: Q = R = 32 (1024 PEs in the TTM array) and P = 128 SVD lanes.
These are the largest evaluated configurations of the original design.
The number formats are:

| what | width | format |
|---|---|---|
| tensor elements in DRAM | 16 bit | signed integer |
| matrix values | 27 bit | signed Q1.25 |
| products and sums | 48 bit | |
| SVD angle path | 32 bit | α, β, γ normalised; angles with 29 fraction bits |

## Data layout

* **Tensors.** A tensor is stored in DRAM with mode 1 varying fastest. For
  a TTM along mode j, every unit sees it folded into three modes
  [L, I, H]:
  - L is the product of the sizes before mode j;
  - I is the size of mode j;
  - H is the product of the sizes after mode j.

  Element (l, i, h) is at address l + L*(i + I*h). The output of a TTM is
  [L, R_out, H], in the same layout. No TTM ever needs a permuted copy of
  a tensor.
* **Factor matrices.** A matrix is stored column by column. Each 27-bit
  entry takes two 16-bit DRAM slots: the low half first, with the value
  sign-extended to 32 bits. Entry (i, r) of an n-row matrix based at M is
  at M + 2*(i + n*r).

  The HOOI program keeps the full I_k x I_k matrix U_k. A_k is simply its
  first R_k columns, so both use the same base address.
* **On-chip memory.** There are MEM_DEPTH words of P x 27 bits, with one
  read port and one write port. Row i of the matrix under SVD has two
  parts:
  - the row b_i of B, in words 0..wb-1, with wb = ceil(J/P) and J the
    number of columns of B^(k);
  - the row u_i of U^T, in words wb..wb+wu-1, with wu = ceil(I_k/P).

  Row i starts at word i*(wb+wu). Tensor values are moved into the 27-bit
  format shifted left by 6 bits, which gives the rotations more fraction
  bits to work with.

## TTM unit (`ttm_unit`, `ttm_pe`, `inplace_adder_tree`)

The array has Q columns and R rows:

* column c sees lane c of the DRAM read, so every PE in a column gets the
  same tensor element;
* row r works on output index r.

Each PE (`ttm_pe`) has:

* a multiplier;
* a multiplexer choosing the matrix operand, either from the row's bus or
  from the PE's own small RAM;
* an adder whose other input is either zero (at the start of a batch) or
  the running sum;
* a result buffer of two banks of NB 48-bit entries.

The unit works in one of two ways.

**Mode j > 1 (L > 1).** Each cycle brings Q neighbouring elements
x(l..l+Q-1, i, h), all with the same i. Row r's bus carries A(i, r), so PE
(r, c) accumulates y(l+c, r, h). Walking i over the whole mode adds up the
dot products, without any data movement in the tensor.

* The L axis is cut into sub-tensors of m = NB*Q elements. A batch is one
  sub-tensor slice: NB reads of Q elements for each i.
* Entry n of the result buffer holds the partial sum for chunk n.
* R_out larger than R is covered by ceil(R_out/R) passes over the data,
  one per row group.
* A factor buffer on chip holds A_j, read once per command, and drives the
  R row buses.

Compute time: I*H*ceil(L/Q)*ceil(R_out/R) cycles.

**Mode 1 (L = 1).** Here the reduction runs along the fast DRAM axis, so
each cycle brings Q consecutive elements of one fiber x(:, h).

* PE (r, c) multiplies element c of the chunk with A(c + nQ, r) taken from
  its own RAM. That RAM is filled with A_1 before the run.
* At the end of the fiber, each row holds Q partial sums. The row's
  **in-place adder tree** adds them up: Q registers and Q/2 adders reused
  for log2(Q) cycles, instead of the Q-1 pipelined adders of a full tree.
  This is enough because there is one sum per fiber, not one per cycle.
* A batch is one fiber.

Compute time: H*ceil(I/Q)*ceil(R_out/R) cycles.

**Output path.** The two result banks work as a ping-pong buffer: a
finished batch is written to DRAM from one bank while the next batch
accumulates in the other.

* A batch that would need a bank that has not been drained yet waits. This
  wait is counted as a *ping-pong stall*.
* Outputs are the 48-bit sums shifted right by 25 (the matrix fraction
  bits) and saturated to 16 bits. Clipped elements are counted.
* Read requests are pipelined, with up to TAGQ outstanding. A tag FIFO
  carries the sideband of each outstanding read, such as the buffer
  entry, the row group and whether the read starts a batch.

## SVD unit (`svd_unit`, `cordic_atan`, `cordic_sincos`, `jacobi_order`)

One-sided Jacobi makes the rows of B mutually orthogonal by rotating pairs
of rows:

1. For rows b_i and b_j, form α = |b_i|², β = |b_j|² and γ = <b_i, b_j>.
2. Take θ with tan 2θ = 2γ/(β−α).
3. Replace b_i by c·b_i − s·b_j and b_j by s·b_i + c·b_j.

After that, <b_i, b_j> = 0. Applying the same rotations to U (initially
U_k^T, or the identity) and repeating over all pairs for a few sweeps
gives:

* rows of B that are orthogonal, with norms equal to the singular values;
* rows of U that are the left singular vectors.

**Pipeline.**

1. *Fetch.* The memory has a single read port, so the two rows come in
   word by word and alternately: word w of row i, then word w of row j.
   That is 2(wb+wu) cycles per pair.
2. *Sums of products.* One set of P squarers serves both α and β, because
   the rows alternate. A second set multiplies the current word with the
   previous one (the row-i word delayed by one cycle) to form γ. Only the
   B words are used. The products are cut to 48 bits (shifted right by 6)
   and summed into 64-bit accumulators.
3. *Angle.* (β−α, 2γ) is normalised so that its larger magnitude sits at
   bit 28. It goes through a 24-stage vectoring CORDIC (`cordic_atan`),
   which gives 2θ, then through a 24-stage rotation CORDIC
   (`cordic_sincos`), which gives cos θ and sin θ in Q1.25. The sign of
   β−α is handled so that |θ| ≤ π/4.
4. *Rotate.* All fetched words wait in a FIFO. When the pair's (c, s)
   arrive, the rotation logic writes b_i and b_j back through the write
   port: one word per cycle, with two multipliers per lane shared over the
   two cycles of a word pair.

**Pair order.** `jacobi_order` produces the round-robin order: starting
from (1, 2), the pair (p, q) is followed by

* (p+1, q−1) if q − p > 2;
* (1, p+q) if p + q ≤ n;
* (p+q+1−n, n) otherwise;
* (1, 2) again after (n−1, n).

This visits all n(n−1)/2 pairs once per sweep. Neighbouring pairs in the
sequence rarely share a row. That is what lets pairs overlap in the
pipeline: pair k+1 is fetched while pair k is still in the CORDICs.

**Hazard interlock.** The CORDIC path is about 50 cycles deep, and a pair
is far shorter than that for small matrices. So a pair that touches a row
still waiting to be rotated must not be fetched yet. A per-row busy
scoreboard holds such a pair back (a *hazard stall*). Further limits are
MAX_INFLIGHT pairs in the pipeline and FIFO_DEPTH words in the FIFO.

For wide rows (large wb) the fetch dominates and the unit runs close to
2(wb+wu)+1 cycles per pair. For narrow matrices the stalls dominate: about
70% of the cycles in the unit test, where n = 6..7 and wb + wu = 2.

## Permute unit (`permute_unit`)

The permute unit moves data between DRAM and the on-chip memory through a
buffer of P x Q words (p' = P, q' = Q).

* **LOAD_T** turns the projected tensor B, folded as [L, I_k, H], into
  B^(k): on-chip row i holds the J = L*H elements with index i, with
  column j = l + L*h. It has two methods:
  - *L > 1 (gather).* The elements of a row lie in runs of L consecutive
    DRAM elements. Each read takes up to Q of a run and drops them at their
    offset in a P-wide word. The word is written when it is full.
  - *L = 1 (mode 1).* Consecutive DRAM elements belong to consecutive
    rows, so a row is scattered with stride I. A tile of Q rows x P columns
    is read column by column (P reads of Q elements) into the buffer, then
    written row by row (Q writes of P elements). The buffer transposes the
    tile.
* **LOAD_U** writes the I_k x I_k factor matrix into the U part of the
  rows, column r of the matrix going into row r.
* **STORE_U** writes the first cfg_r rows of the U part back to DRAM as
  columns of the factor matrix.

## Controller and the HOOI program (`controller`, `tucker_top`)

The host pushes commands (`cmd_t`: operation, addresses, the folded sizes
L/I/R/H, words per row, number of sweeps) into a queue of depth 16. The
controller:

* runs one command at a time;
* starts the unit the command belongs to;
* gives that unit the DRAM port and the on-chip memory through the
  `owner` signal;
* counts commands and cycles per operation.

One warm-start HOOI iteration on a 3-way tensor is 21 commands. For
mode 1, for example:

```
TTM   X  x3 A3^T            -> T1  [I1*I2, R3]      (mode-j, L = I1*I2)
TTM   T1 x2 A2^T            -> T2  [I1, R2, R3]     (mode-j, L = I1)
TTM   T2 x1 U1^T            -> B   [1, I1, R2*R3]   (mode-1, R_out = I1)
LOAD_T  B  (L = 1, I = I1, H = R2*R3)   -> on-chip rows, B part
LOAD_U  U1 (I = I1)                      -> on-chip rows, U part
SVD     n = I1, sweeps = s
STORE_U all I1 rows                      -> U1 (its first R1 columns are A1)
```

Modes 2 and 3 are the same with the other factor matrices. The TTMs run
in decreasing mode order and use the factors already updated in this
iteration. How many iterations to run and when to stop is up to the host.

**Ordering of singular vectors.** HOOI takes A_k as the first R_k columns
of the rotated U, and the Jacobi unit does not sort singular values. This
works under the warm start: the dominant rows of B stay where they are,
because every rotation is by at most π/4. The end-to-end test builds its
factor matrices close to the coordinate axes so that this is also true
from the identity start. A host that starts from arbitrary factors should
check the norms of the B rows (the singular values), or permute U_k, before
taking the first R_k columns.

## Where this differs from, or adds to, the original description

* **Half angle.** The rotation uses θ = ½·atan(2γ/(β−α)). Using the full
  arctangent, as written in the algorithm listing, does not orthogonalise
  the two rows.
* **Round-robin order.** The successor rule above, applied to one pair at
  a time from (1, 2), visits every pair. The accompanying description
  starts from the n/2 pairs (1,2), (3,4), ... and applies the rule to all
  of them at once, which repeats pairs. The rule was followed.
* **SVD timing.** The cycle estimate I(I−1)·ceil((I+R)/p) assumes pairs
  stream back to back. The real data dependency through the CORDIC path
  forces the hazard interlock, so small matrices take longer than that
  estimate.
* **Design choices with no counterpart in the description:**
  - the DRAM interface (element addressing, in-order responses, masks);
  - the command set;
  - the factor buffer behind the TTM row buses;
  - the sub-tensor size NB*Q = 512;
  - the matrix layout in DRAM;
  - the ×64 tensor scaling and the 64-bit α/β/γ accumulators with
    normalisation before the CORDIC;
  - 24 CORDIC iterations;
  - all FIFO and queue depths;
  - the two LOAD_T methods.
* **Not built.** The DRAM controller and the DRAM are outside this RTL.
  `tucker_top` brings out the controller's user port (Q lanes x 16 bit,
  512 bits at Q = 32).

## Limits at the default parameters

| quantity | limit | set by |
|---|---|---|
| mode size I_k | 512 | TTM factor buffer (IJ_MAX), mode-1 fiber (NQ_MAX·Q), SVD rows (NMAX) |
| TTM output size R_out, including the warm-start TTM with R_out = I_k | 512 | RG_MAX·R |
| on-chip memory | 66048 words of 128 x 27 bits (228 Mbit) | MEM_DEPTH |
| DRAM | 2^34 elements of 16 bits (32 GiB) | 34-bit element addresses |

One SVD needs I_k·(ceil(J/128) + ceil(I_k/128)) words, where J is the
product of the other ranks. MEM_DEPTH is sized for the largest evaluated
case, a 256⁴ tensor with ranks 32: 256·(256 + 2) = 66048 words.

All the evaluated workloads fit:

* the 3-way I³ tensors with ranks (16, 24, 32), for I up to 512;
* 128³ with rank 32;
* the 4-way I⁴ tensors with ranks 16 or 32, for I up to 256;
* the 190 x 90 x 70 MRI sequence with ranks (40, 32, 28).

Smaller arrays (Q, R = 16) and fewer SVD lanes (P = 16..64) are parameter
changes.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Run one with plain verilator, for
example:

```
verilator --binary --timing --assert -Wno-fatal rtl/tucker_pkg.sv rtl/*.sv \
    tb/dram_model.sv tb/tb_tucker_top.sv --top-module tb_tucker_top
./obj_dir/Vtb_tucker_top
```

* **`tb_ttm_unit`** runs five TTMs against a random-stall DRAM model
  (`tb/dram_model.sv`): mode-j, mode-1, ping-pong pressure and
  saturation. It checks:
  - every output element;
  - the number of DRAM reads against the formula;
  - the cycle count against the array rate.
* **`tb_svd_unit`** runs Jacobi SVDs of 6 x 10 and 7 x 16 matrices. It
  checks:
  - orthogonality of B;
  - orthonormality of U;
  - the reconstruction;
  - the singular values against a double-precision Jacobi;
  - the cycle count against 2(wb+wu)+1 per pair plus the counted waits.
* **`tb_permute_unit`** checks both LOAD_T methods, LOAD_U and STORE_U
  element by element.
* **`tb_tucker_top`** runs two warm-start HOOI iterations on a
  12 x 10 x 8 tensor of multilinear rank (3, 3, 2) at the full default
  size, through the command interface. It checks:
  - orthonormality of each A_k;
  - that each A_k spans the true factor subspace;
  - the reconstruction error with the hardware factors (5e-4, against
    3.6e-4 for the exact factors, which is the 16-bit rounding of X);
  - that every mechanism happened at least once: mode-1 and mode-j TTM,
    ping-pong stalls, saturation, gather and transposing loads, LOAD_U,
    STORE_U and SVD hazard stalls.

  It also checks that no TTM finishes faster than its array rate.
* The smaller blocks (PE, adder tree, CORDICs, pair order, memory,
  controller) are checked against models written in the testbench.
