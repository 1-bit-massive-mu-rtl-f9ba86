# C2PO: a systolic 1-bit precoder for massive MU-MIMO

A massive MU-MIMO base station with B antennas serves U single-antenna users
in the same time–frequency slot. If each antenna gets only a pair of 1-bit
DACs, every antenna can transmit just one of four values, ±ℓ ± jℓ. Linear
precoding followed by quantisation ("MRT-Q", "ZF-Q") then leaves strong
multi-user interference and an error floor. C2PO is a nonlinear precoder
that picks the 1-bit transmit vector by a few cheap iterations of
forward–backward splitting, a proximal-gradient method, on a biconvex
relaxation of the MSE-optimal problem:

    z(t+1) = x(t) − τ·AᴴA·x(t)            AᴴA = HᴴH − v vᴴ,  v = Hᴴs/‖s‖
    x(t+1) = prox(z(t+1))                  per real/imag part: clip(1.25·z, −1, +1)
    x(1)   = Hᴴs (MRT),  output = sign(x(t_max+1))

Here H (U×B) is the channel and s the vector of user symbols. The matrix A
projects out the direction of s, so ‖Ax‖ measures interference up to a common
gain. The factor 1.25 = 1/(1−τδ) pushes entries outwards towards the 1-bit
alphabet, and the clip keeps them inside it.

The cost per iteration is two matrix–vector products with the (U+1)×B
augmented matrix H̄ = [H; vᴴ]. First the **wide product** w = H̄(τx) is
computed. Then the **tall product** z = x − H̄ᵀw is computed, with
H̄ᵀ = [Hᴴ, −v]. This is about 2B(U+1) multiplications instead of the B² of a
full Gram matrix.

The RTL in `rtl/` implements the VLSI architecture for this algorithm
published by Castañeda, Jacobsson, Durisi, Coldrey, Goldstein and Studer
("1-bit Massive MU-MIMO Precoding in VLSI"). It uses their word lengths and
cycle counts, and its default size is their largest FPGA design: B = 256,
U = 16. That paper also proposes a sibling algorithm, C1PO, which needs a B×B
matrix inverse precomputed per channel; C1PO is not part of this RTL.

## Architecture

```
             x(1), Hbar writes                              sign bits (2B) -> 1-bit DACs
                   |                                                ^
   +---------------v------------------------------------------------+-------+
   |  array 0: PE1 .. PEU, PE U+1, control unit   acc[17] ---+              |
   |  array 1: ...                                acc[17] ---+--> adder tree|
   |  ...                                                    |   (log2 B/U  |
   |  array B/U-1                                 acc[17] ---+    levels)   |
   |        ^ w[17] (same w to every array) <-----------------------+       |
   +------------------------------------------------------------------------+
```

* **B/U linear arrays** (`c2po_array`). Array *a* owns antennas aU … aU+U−1,
  so it holds the U columns of H̄ for those antennas and the U entries of x
  for them. Each array has U+1 processing elements and its own control unit.
  All arrays run in lockstep.
* **Processing element** (`c2po_pe`). A PE contains:
  * an *a* register, which holds x_u;
  * a *b* register, the MAC operand: τx during the wide product, w_u during
    the tall product;
  * an h-memory with one row of the array's H̄ block (`c2po_hmem`);
  * a complex MAC (`c2po_cmac`);
  * a projection unit (`c2po_proj`).

  PE U+1 handles the extra row vᴴ. It has no x entry of its own: its b
  register always holds the same value as PE 1's.
* **Adder tree** (`c2po_addtree`). It sums the B/U partial wide products of
  each of the U+1 entries of w in a pipelined binary tree. The result is
  broadcast back into the b registers of all arrays.

### One iteration, cycle by cycle

An iteration takes **N = 2U + log2(B/U) + 6** cycles, which is 42 at the
default size. The table uses L = log2(B/U), T0 = U + L + 2, and 1-based PE
numbers. "Cycle" means the cycle in which an operand sits in the MAC input
registers. The MAC has three pipeline stages, so its accumulator sees that
operand two cycles later.

| cycles | what happens |
|---|---|
| 0 … U−1 | **Wide product.** PE u multiplies h-memory address c (holding H̄[u, u+c]) by b = τx_{u+c}. Then b rotates one step round the ring: PE u takes PE u+1's value, and PE U takes PE 1's. PE U+1 follows PE 1 (address c holds H̄[U+1, 1+c]). |
| 2 … U+1 | Products are accumulated. After cycle U+1 each PE holds its row's dot product over the array's U antennas. |
| U+2 … U+1+L | The adder tree sums over the arrays. Its last level writes w_u into the b register of PE u of every array. |
| T0 … T0+U−1 | **Tall product.** PE u multiplies conj(H̄[u, u+j]) by w_u, at the same addresses as in the wide product. |
| T0+2 | Each PE starts its partial sum from its a register: x_u − conj(H̄[u,u])·w_u. |
| T0+3 … T0+U+1 | PE u takes the partial sum of PE u+1 (PE U takes PE 1's), subtracts its own product and keeps the result. A partial sum for z_k thus walks down the ring once and collects all U terms of Hᴴw. |
| T0 … T0+U+1 | Meanwhile PE U+1 forms conj(H̄[U+1, j+1])·w_{U+1}. These products go down a separate chain of registers (PE U+1 → PE U → … → PE 1). |
| T0+U+2 | PE u adds the chain value that has just arrived, which is exactly the term for z_u (the vᴴ column of H̄ᵀ enters with a + sign). |
| N−1 | **Projection.** z_u → x_u(t+1) is written into a, and τx_u(t+1) into b. |

The memory layout is what makes this work without any central x memory.
PE u stores its row rotated, with H̄[u,u] at address 0, so every PE reads the
same address in the same cycle. The write port of the top level accepts
logical (row, column) pairs and computes the rotated address itself.

Throughput is U symbols per t_max·N cycles. For example, t_max = 2 at B = 256
gives 84 cycles per symbol vector.

## Number formats

All arithmetic is two's complement. Nothing saturates: adders and
multipliers wrap, and every narrowing drops LSBs.

| quantity | bits | fraction bits | where set |
|---|---|---|---|
| x | 12 | 5 | paper |
| τx | 12 | 11 | paper |
| H̄ entries | 10 | 8 | paper |
| MAC accumulator | 18 | 15 (wide), 11 (tall) | paper |
| projection | 18 | 11 | paper |
| adder tree | 21 | 15 | paper |
| b register (τx or w) | 18 | 11 | this design |
| product before truncation | 29 | 19 | this design |

The step size is τ = 2^−TAU_SHIFT, so τx is a shift of x. TAU_SHIFT must lie
between 1 and 6. The projection compares z with ±0.8, coded as ±1638/2048; if
|z| is larger it outputs ±1, otherwise z + (z >>> 2). The clipping level is 1
because the transmit power is normalised to P = 2B.

**Scaling of the inputs.** The formats only work if H is normalised suitably;
nothing in the hardware enforces this. The testbenches use channel entries of
variance 1/U. Then x(1) = Hᴴs has entries of order 1, and ‖AᴴA‖ ≈
(√B+√U)²/U, which is 25 at B = 256. The default TAU_SHIFT = 5 (τ = 1/32)
satisfies the convergence condition τ < 1/‖AᴴA‖ for that size. Smaller arrays
need a larger τ: the workload test uses TAU_SHIFT = 3 for B = 32 and 4 for
B = 64 and 128. τx wraps if |x(1)| ≥ 2^TAU_SHIFT.

## Interface of `c2po_top`

| port | dir | meaning |
|---|---|---|
| `h_we_i`, `h_row_i`, `h_col_i`, `h_data_i` | in | Write one entry of H̄ per cycle. Row 0…U−1 is H, row U is vᴴ; the column is the antenna. Not while `busy_o`. |
| `x_init_i[B]` | in | x(1) = Hᴴs, sampled in the start cycle. |
| `start_i`, `t_max_i` | in | Start t_max iterations. Ignored while busy. |
| `busy_o`, `done_o` | out | `done_o` pulses t_max·N cycles after the start cycle. |
| `xhat_re_o[B]`, `xhat_im_o[B]` | out | Sign bits of x(t_max+1) (1 = −ℓ), for the DACs. Valid from `done_o` until the next start. |
| `x_o[B]` | out | The soft iterate itself, for observation. |
| `clip_o` | out | A projection clipped some entry in this cycle (observation). |

t_max = 0 returns sign(x(1)) straight away, i.e. the MRT-Q baseline.

Computing H̄ and x(1) from H and s (a B×U by U matrix–vector product and a
norm) is outside this block. So are the 1-bit DACs.

## Where this RTL departs from, or adds to, the published design

* **Interface.** The ports, the start/busy/done handshake, the H̄ write port
  with automatic address rotation, and t_max as a run-time input are this
  design's own. The paper describes none of them.
* **b register and w format.** The published text gives no format for w in
  the MAC input register. Here one 18-bit, 11-fraction-bit register serves
  both τx and w. The tree output is truncated from 15 to 11 fraction bits.
* **Pipeline placement.** The MAC's three stages are: real products; complex
  combination with truncation; accumulation. The adder tree registers levels
  1…L−1, and its last level is captured by the b registers. Only the total
  latencies are taken from the paper, and they match it exactly: 39/40/41/42
  cycles per iteration for B = 32/64/128/256 with U = 16.
* **PE U+1 data path.** Its products travel on a separate register chain, and
  τx rotates from b register to b register. The published figure shares one
  set of registers between these two movements. Its b register copies PE 1's
  load instead of being wired into the ring.
* **h-memory read.** The paper keeps H̄ in distributed LUT RAM and does not
  say whether its read is registered. Here it is: the control unit issues
  each address one cycle early, so the H̄ entry leaves its read register in
  the same cycle as the matching b value leaves the b register.
* **Projection adder.** The paper merges it into the MAC accumulator; here it
  is a separate adder reading the accumulator. The output register drawn in
  the figure is the a register itself.
* **Reset.** Only the control units are reset (asynchronous, active low).
  Datapath registers and memories are always written before they are read.
* **Not built.** C1PO, the MRT-Q baseline core, preprocessing and the DACs.

## Files

| file | contents |
|---|---|
| `rtl/c2po_pkg.sv` | formats, complex types, control word, τx helper |
| `rtl/c2po_cmac.sv` | complex MAC |
| `rtl/c2po_proj.sv` | projection (prox) |
| `rtl/c2po_hmem.sv` | per-PE H̄ row memory |
| `rtl/c2po_pe.sv` | processing element |
| `rtl/c2po_ctrl.sv` | per-array control unit (cycle schedule) |
| `rtl/c2po_array.sv` | linear array of U+1 PEs |
| `rtl/c2po_addtree.sv` | pipelined adder tree |
| `rtl/c2po_top.sv` | top level |
| `tb/tb_c2po_ref_pkg.sv` | bit-exact algorithmic reference model |
| `tb/tb_c2po_*.sv` | self-checking testbenches |

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_c2po_top` runs the default B = 256, U = 16 design on random Rayleigh
  channels with QPSK symbols, for t_max = 1, 3, 0 and 24. It compares every
  antenna's x and sign bits with the reference model and checks 42 cycles per
  iteration. It also counts clipped and linear projections, MRT-Q bypasses
  and starts ignored while busy.
* `tb_c2po_workloads` covers the implementation-table sizes B = 32, 64, 128
  and 256 with U = 16 and t_max = 24, using BPSK (B = 32, 64) or 16-QAM
  (B = 128, 256). It checks bit-exactness
  and latency. It also checks that the 1-bit output has a lower MSE than MRT-Q.
  In one run over four random channels per size, the normalised MSE of C2PO
  against MRT-Q was 0.20 against 0.41 (B = 32), 0.07 against 0.24 (B = 64),
  0.019 against 0.14 (B = 128) and 0.0075 against 0.078 (B = 256).
* Unit tests: `tb_c2po_cmac` (random operands and operations, pipeline timing),
  `tb_c2po_proj` (threshold edges), `tb_c2po_hmem`, `tb_c2po_addtree`,
  `tb_c2po_ctrl` (schedule of every cycle), `tb_c2po_pe` (random operands
  through load, wide product, tall product and projection, including PE U+1)
  and `tb_c2po_array` (one array against the model).

The reference model (`tb_c2po_ref_pkg`) evaluates the algorithm directly, as
sums over matrix entries. Because every sum wraps modulo 2^n, the order of
summation does not affect the result. Agreement with the RTL therefore tests
the schedule, the memory layout and the data movement, not just the
arithmetic.

Simulating with Verilator, for example the top-level test:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/c2po_pkg.sv tb/tb_c2po_ref_pkg.sv -y rtl -y tb \
  tb/tb_c2po_top.sv --top-module tb_c2po_top
./obj_dir/Vtb_c2po_top
```

The full-size test builds in under half a minute and simulates in well under a second.

What has not been checked: timing closure, FPGA resource counts, and
error-rate curves over SNR. The precoder's quality is checked only through
the noiseless MSE comparison above.
