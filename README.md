# ZK-Flex accelerator in SystemVerilog

Zero-knowledge provers spend nearly all their time in two kernels over large prime
fields: multi-scalar multiplication (MSM) on an elliptic curve and number-theoretic
transforms (NTT) on polynomials. Both reduce to modular multiplications, and the
curves in use have fields of very different sizes: 254 bits (BN128), 381 bits
(BLS12-381) and 753 bits (MNT4-753). A multiplier built for one width wastes most of
its area on the others.

This design builds one modular multiplier fabric that serves all three widths. Each
compute node, the **TCore**, holds 45 small 134-bit multiplier groups. Toom-Cook
splitting maps a 256-, 384- or 768-bit product onto these groups: five 256-bit, three
384-bit or one 768-bit Montgomery multiplication leave a TCore per cycle, and almost
every group stays busy in every mode. 36 TCores and 28 memory nodes sit in an 8 × 8
grid joined by a ruche network with 768-bit links. A global controller sequences NTT
stages. For MSM it keeps linked lists of the points in each Pippenger bucket, so that
up to 15 point-addition engines can work on the same window without two of them ever
touching the same bucket.

The RTL is in `rtl/` (one module or package per file) and the self-checking
testbenches are in `tb/`. Every file opens with a comment on what it does, its
interface and its timing, and on which parts follow the published architecture and
which are this design's own choices.

## Contents

1. Precision modes and number formats
2. Toom-Cook multiplication on 45 PE groups
3. The Montgomery pipeline and the constant d
4. The TCore as a network node
5. Network and memory nodes
6. Global controller: NTT schedule
7. Global controller: MSM buckets as linked lists
8. Top level
9. Verification and how to simulate
10. Departures from the architecture description, and what is not built

## 1. Precision modes and number formats

| mode       | width n | Toom scheme               | slices       | d    | Montgomery lanes per TCore | threads per lane |
|------------|---------|---------------------------|--------------|------|----------------------------|------------------|
| `MODE_256` | 256     | Toom-2                    | 2 × 128 bit  | 1    | 5                          | 3 per slot       |
| `MODE_384` | 384     | Toom-3                    | 3 × 128 bit  | 36   | 3                          | 5 per slot       |
| `MODE_768` | 768     | Toom-2 outer, Toom-3 inner| 2 × 384 bit  | 36   | 1                          | 15 per slot      |

All shared constants and types are in `zkf_pkg`: the slice width (128 bits), the
signed M-PE operand width `MW = 134`, the packet format `flit_t`, the opcodes, the
node-id layout and the host command format. A modulus Q must satisfy Q < 2^n for
its mode. The final reduction (section 3) also assumes the field sizes of the
intended curves: Q < 2^255, 2^381 and 2^753.

Operands travel in 768-bit packets. In the 256- and 384-bit modes one packet carries
an operand pair: A sits in the low n bits and B in the next n bits. In the 768-bit
mode, A comes first in an `OP_MULA` packet and B follows in the packet after it.

## 2. Toom-Cook multiplication on 45 PE groups

This is the core idea of the design, and the part that is hardest to see in the code.

**Evaluation.** Split an operand into k slices of 128 bits and read it as a
polynomial a(x) = a0 + a1·x + a2·x² evaluated at x = 2^128. The product
c(x) = a(x)·b(x) has degree 2k-2. It is fixed by its values at 2k-1 points. The
design uses the points {0, 1, inf} for Toom-2 and {0, 1, -1, 2, inf} for Toom-3
(`e_pe`). Each point costs one multiplication of two evaluated slices (`m_pe`). An
evaluated slice can reach 4·a2 + 2·a1 + a0 at the point 2, and can be negative at
-1. This is why the multipliers are signed and 134 bits wide rather than 128.

**Division-free interpolation.** Getting the coefficients c_i back from the values
w_p means multiplying by the inverse of a Vandermonde matrix. For Toom-3 that
inverse contains thirds and halves. `interp_pe` computes 36·c_i instead, which needs
only shifts, additions and subtractions:

```
6c2  = 3(w1 + w-1) - 6w0 - 6winf
6r   = 6w2 - 6w0 - 4·(6c2) - 96winf          (r = 2c1 + 8c3)
s    = w1 - w-1                              (s = 2c1 + 2c3)
36c3 = 6r - 6s      36c1 = 18s - 36c3      36c2 = 6·(6c2)      36c0 = 36w0      36c4 = 36winf
```

Toom-2 needs no division at all: c0 = w0, c1 = w1 - w0 - winf, c2 = winf, so d = 1.
`hier_adder_tree` then recomposes Σ c_i·2^(128·i) in a two-level adder tree. The
result is d·A·B exactly, with d = 36 for Toom-3 and d = 1 for Toom-2.

**Mapping onto the groups (`tc_slot`).** A TCore's 45 groups, each an E-PE pair and
one M-PE, form three slots of 15 threads. A slot gives one integer product for each
lane:

* 256-bit: Toom-2 needs 3 point products, so 15 threads serve 5 lanes (threads 3l
  to 3l+2 serve lane l).
* 384-bit: Toom-3 needs 5 point products, so 15 threads serve 3 lanes.
* 768-bit: the operand is first split into two 384-bit halves by an outer Toom-2 on
  the points {0, 1, inf}. This gives the three half-products A0·B0, (A0+A1)(B0+B1)
  and A1·B1. Each half-product is a Toom-3 product on 5 threads, using all 15. The
  sum A0 + A1 has 385 bits, so its top slice carries one extra bit. This is one
  reason for the guard bits in `MW`. An outer interpolation and an adder tree with a
  384-bit shift finish the product. Because the outer level is Toom-2, the scale is
  36 here as well.

The thread-to-point assignment for each mode is a fixed table in `tc_slot`. The
mode selects among the three tables with a multiplexer in front of the E-PEs.
Utilisation is 15/15 threads in every mode. The published per-mode figures (93.5 %,
98.1 %, 100 %) count unused bits inside the slices as well.

## 3. The Montgomery pipeline and the constant d

`mont_mul` chains the three slots as the three multiplications of Montgomery
reduction, with R = 2^n:

```
T = d·A·B                       (slot 0)
m = (d·(T mod R)·Q') mod R      (slot 1, Q' = -Q^-1 mod R from Qinv_reg)
U = d·m·Q                       (slot 2)
Z = (d²·T + U) / R              (exact: d²T + U ≡ d²T - d²T ≡ 0 mod R)
Y = Z mod Q                     (13 stages that conditionally subtract Q·2^k, k = 12..0)
```

The result is Y = d³·A·B·R⁻¹ mod Q. For d = 1 this is the ordinary Montgomery
product. For d = 36, software works in a domain scaled by d³. It stores x̂ = x·R·d⁻³
mod Q and gets back x̂·ŷ·d³·R⁻¹ = (xy)^ = xy·R·d⁻³, so the constant costs nothing
at run time. Only the conversions into and out of the domain change.

The multiplication by d² = 1296 in the Z step is done as three shifts and adds.
Z < d³Q²/R + dQ, which is below 2^13·Q for the curve sizes above. Thirteen
conditional subtractions therefore always give a result below Q. The pipeline has
8 register stages. One operand set per lane is accepted every cycle, and `y`
appears 8 cycles after `in_valid`.

## 4. The TCore as a network node

`tcore` contains `mont_mul`, the 24-slice modular adder `modadd_array`, the 2.13 KB
shared memory `shared_mem` (136 × 128-bit words), the Q and Q' registers and a
controller. The controller talks to the router through one valid/ready packet port
in each direction.

| opcode        | action |
|---------------|--------|
| `OP_CFG_MODE`, `OP_CFG_Q`, `OP_CFG_QINV` | set mode, Q, Q' (taken only when the TCore is idle) |
| `OP_MULA`     | hold A for a following 768-bit `OP_MUL` |
| `OP_MUL`      | Montgomery product of the packed pair |
| `OP_ADD` / `OP_SUB` | (A ± B) mod Q |
| `OP_SMRD`     | read shared-memory slot `tag` and send it |

Each request carries where its result goes: node `rdst`, with opcode `rop` and tag
`rtag`. When `rdst` is the TCore itself, the result is written into shared-memory
slot `rtag` instead. There are 22 slots of six words. Back-to-back `OP_MUL` packets
are gathered into a batch of as many operand sets as the mode has lanes. A batch
issues when it is full, or as soon as the next packet is not a multiplication, so a
lone request is not held back. A 16-entry output queue with credit counting (queued
+ in flight + batch) lowers `in_ready` instead of dropping results. `modadd_array`
splits its 24 slices of 128 bits into lanes of 2, 3 or 6 slices. It computes
a ± b and a ± b ∓ Q in two carry chains and picks the right one by the final
carries, in one cycle.

## 5. Network and memory nodes

**Router (`ruche_router`).** Every grid position has a nine-port router: local, the
four mesh neighbours, and four ruche links that skip two nodes. A packet is a single
822-bit flit: a 768-bit payload plus header. Routing is dimension-ordered, X then Y.
In each dimension the router takes a ruche link while two or more hops remain and a
mesh link otherwise. Node id = {ext, y[2:0], x[2:0]}. A destination with the ext bit
set leaves the grid through the south port of the bottom row below column x, where
the HBM side attaches. Each input has a two-entry FIFO. Each output is a register
loaded by a round-robin arbiter. A hop takes 2 cycles.

**Memory node (`mem_node`).** There are 16 banks of 4956 × 128-bit words
(1.21 MiB). A 768-bit value at address t occupies words 6t to 6t+5, which fall in
six different banks, so a whole value moves in one cycle. `OP_WR` stores a value.
`OP_RD` reads one and sends it to `rdst` with opcode `rop` and tag `rtag`. The read
request's own payload is otherwise unused, so its low bits carry the next hop of the
response: `data[6:0]`, `data[15:8]` and `data[31:16]` become the response's `rdst`,
`rop` and `rtag`. With this a single read can send an operand pair to a TCore as
`OP_MUL` and have the product written back into any memory node with `OP_WR`. This
is the memory → TCore → memory stream that the grid is laid out for. The read
answer leaves one cycle after the request is taken.

## 6. Global controller: NTT schedule

`ntt_ctrl` runs a mixed-radix transform of size N = r0·r1·…, with radices from
{2, 3, 4, 5, 7, 8}, one stage at a time. For each butterfly it emits a descriptor of
read base and stride, write base and stride, and twiddle step. The indexing follows
the Stockham autosort form of decimation in frequency. Let s be the product of the
radices already done and n = N/s. Butterfly (p, q), with q < s and p < n/r, reads

```
x[q + s(p + k·n/r)],  k = 0..r-1        (read stride N/r in every stage)
```

and writes output j to y[q + s(r·p + j)], multiplied by w_N^(j·p·s). The read
pattern is the same in every stage, which is the constant-geometry property, and the
result needs no final reordering. `N`, the radices and the stage count are captured
on `start`. A descriptor is offered every cycle. `last_bf` marks the end of a stage
and `done` pulses after the last stage.

## 7. Global controller: MSM buckets as linked lists

Pippenger's method cuts each scalar into c-bit windows. The design uses signed
digits: a digit of 2^(c-1) or more becomes digit - 2^c with a carry into the next
window. This halves the buckets to 2^(c-1), and a negative digit adds the negated
point. Within one window each point is added into one bucket.

* `msm_ctrl` keeps the tile's scalars (up to 4096 of 768 bits, wide enough for MNT4-753) in a scalar memory.
  It computes each point's digit for the current window as the scalar is written.
  `G_MSM_WIN` moves to another window by rescanning the scalar memory, one point per
  cycle.
* `ll_mem` holds a head memory (first point of each bucket, plus a valid bit) and a
  link memory (next point, "has next" and sign for each point). A point is inserted
  at the head of its bucket's list in one cycle: link[p] ← head[b], head[b] ← p.
  The lists are therefore complete the moment the last scalar has been written.
* `bucket_assigner` hands whole buckets to up to 15 MPADD engine streams, the number
  of modified point additions one TCore sustains in 256-bit mode. A free engine
  takes the next non-empty bucket. Empty buckets cost one head-memory read and
  nothing else. The engine then walks the bucket's list and emits
  (bucket, point, sign, first, last) under its own valid/ready handshake. Round-robin
  arbiters share the one head port and the one link port among the engines. Because
  a bucket belongs to exactly one engine until its last point, no two engines can
  update the same bucket. This is the conflict freedom that lets all engines share
  one window and one bucket memory.

`global_ctrl` decodes the host command stream (`G_NTT`, `G_MSM_CFG`, `G_SCALAR`,
`G_MSM_WIN`, `G_MSM_RUN`). It holds `cmd_ready` low while the unit a command needs is
busy.

## 8. Top level

`zkflex_top` builds a GX × GY grid (default 8 × 8) of routers. The interior nodes get
TCores and the border nodes memory nodes, which gives 36 and 28 at the default size.
The global controller sits beside the grid. Its ports are:

* `host_*`: packets from the host (the PCIe side) enter at the west port of node
  (0,0).
* `ext_out_*[x]`, `ext_in_*[x]`: the HBM side, at the south ports of the bottom row.
* `cmd_*`: host commands for the global controller.
* `bf_*`, `ntt_done`: NTT butterfly descriptors.
* `e_*`, `msm_win_done`: bucket streams for the 15 MPADD engines.
* `tcore_busy`: one bit per TCore.

GX and GY exist so that smaller grids can be simulated. The layout rule is the same
at every size.

## 9. Verification and how to simulate

Each block has a testbench `tb/tb_<block>.sv`. It compares the block's outputs with
values computed in the testbench by a different method, and prints
`TB_RESULT checks=N failures=M`:

| testbench | checks |
|-----------|--------|
| `tb_m_pe`, `tb_e_pe`, `tb_interp_pe`, `tb_hier_adder_tree` | random and corner values against direct arithmetic |
| `tb_tc_slot` | d·A·B for every lane in all three modes, latency 2 |
| `tb_mont_mul` | Y < Q and Y·2^n ≡ d³AB (mod Q) for the BN254 and BLS12-381 primes and a random 753-bit modulus, inputs up to Q-1, latency 8 |
| `tb_modadd_array` | sums and differences in all modes, including wrap-around |
| `tb_shared_mem`, `tb_mem_node`, `tb_ll_mem` | against a memory model, with stalls |
| `tb_ruche_router` | every flit delivered once on the port the routing rule names, back-pressure, 2-cycle hop |
| `tb_tcore` | full packet protocol in all three modes, batches, shared-memory store and readback |
| `tb_ntt_ctrl` | descriptors used to run real transforms mod 2521 (sizes 8 to 210, several radix orders) against a direct DFT |
| `tb_msm_ctrl`, `tb_bucket_assigner`, `tb_global_ctrl` | every point in the right bucket with the right sign, exactly once, one engine per bucket |
| `tb_zkflex_top` | end to end, see below |

`tb_zkflex_top` drives the chip only through its ports, on a 4 × 4 grid (4 TCores
and 12 memory nodes) with every other parameter at its default. It covers:

* TCores configured in all three modes;
* direct multiplications and additions;
* the memory → TCore → memory chain;
* shared-memory parking;
* writes from the HBM side;
* an NTT of size 1680;
* two windows of a 1000-point MSM tile with c = 12.

It also counts each mechanism, including ruche-link transfers, full batches,
TCore input and output back-pressure and skipped empty buckets, and fails if any
count is zero. A
simulation of the full 8 × 8 chip is too large for Verilator to build in reasonable
time: each of the 36 TCores compiles into several MB of C++. The largest grid
simulated is 4 × 4.

To run a testbench with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/zkf_pkg.sv \
          tb/tb_mont_mul.sv --top-module tb_mont_mul -Mdir obj_mont_mul -o sim
obj_mont_mul/sim +verilator+rand+reset+2
```

The testbenches do not depend on initial values (`+verilator+rand+reset+2`
randomises them). To try a larger grid, change `GX`/`GY` in `tb_zkflex_top`.

## 10. Departures from the architecture description, and what is not built

* **Chosen here, not given by the architecture:**
  * the Toom evaluation points;
  * the 134-bit operand width;
  * the factorisation of the interpolation;
  * the final 13-stage reduction;
  * all packet and command formats and the TCore controller's behaviour;
  * ruche factor 2, routing, buffering and arbitration;
  * 16 banks per memory node;
  * signed-digit windows;
  * head insertion in the bucket lists;
  * the bucket-to-engine policy;
  * the Stockham index scheme;
  * the tile limits: 4096 points, windows of 4 to 12 bits, NTTs up to 2^31 points
    (the host command carries N in 32 bits and up to 31 radices of 4 bits).
* **The Montgomery figure labels the final shift as a left shift.** Division by R is
  a right shift, and that is what is built.
* **Scalar width.** Scalars are 768 bits wide in the scalar memory and the host
  command, so one format serves all three curves. With 256-bit curves most of each
  word is zero; a narrower memory per mode would save area.
* **NTT size.** `ntt_ctrl` addresses transforms up to 2^31 points. This covers the
  largest workload considered (about 1.4 × 10^9 constraints). Transforms larger than
  the on-chip memory are tiled through HBM by the host, which is not modelled.
* **Not built:**
  * the point-addition (MPADD) engines and the NTT butterflies as TCore programs:
    they are mappings of sequences of modular operations onto TCores, produced by
    the host's instruction generator, and the hardware here stops at the descriptor
    and bucket streams;
  * the PCIe controller;
  * the HBM controller, PHY and DRAM;
  * the host-side optimizers (window-size choice, padding of constraint counts).
* **Bucket memory and accumulation.** These live in the memory nodes and are handled
  by the MPADD programs, so they are not part of this RTL.
