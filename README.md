# Memory-free scaled dot-product attention as a streaming pipeline

Attention computes `O = softmax(Q K^T) V` for `N` tokens of width `d`. Done
naively it builds two `N x N` matrices. A streaming dataflow machine can work
on one query row at a time, but the obvious row-wise pipeline still needs a
buffer of length `N`. The softmax denominator of a row is known only after the
row's last score. Until then, every exponentiated score has to wait in a long
FIFO before it can be divided.

This RTL implements the fix described in *Implementing and Optimizing the
Scaled Dot-Product Attention on Streaming Dataflow* (Sohn, Zhang, Olukotun).
It makes three changes to the algorithm:

* the division moves after the product with `V`;
* a running maximum replaces the row maximum;
* every partial sum is rescaled whenever that maximum grows.

After these changes, both reductions of a row (its softmax denominator and its
output vector) finish in the same cycle. No FIFO longer than two entries is
needed. The storage does not depend on `N`.

The design is a chain of small nodes. Each node matches one "parallel
pattern" (Map, Reduce, Scan, Repeat, MemReduce). The nodes are joined by
depth-2 FIFOs and a valid/ready handshake. One `q_ik * k_kj` product enters
per cycle, so one attention head takes `N*N*d` cycles plus a short drain.

## The recurrence

For query row `i` and key `j` (with `m = -inf`, `r = 0` and `l = 0` before
`j = 0`):

```
s_ij     = sum_k q_ik * k_kj                 dot product
m_ij     = max(m_i(j-1), s_ij)               running maximum
Delta_ij = exp(m_i(j-1) - m_ij)              how much the old maximum was too small
e_ij     = exp(s_ij - m_ij)                  this key's weight, against the current maximum
r_ij     = r_i(j-1) * Delta_ij + e_ij        running denominator
l_ij     = l_i(j-1) * Delta_ij + e_ij * v_j  running weighted sum of value rows (d-vector)
o_i      = l_iN / r_iN
```

All terms of `r` and `l` are expressed relative to the same maximum. So when
the maximum grows, multiplying both accumulators by `Delta` brings the old
terms up to date. The result equals the ordinary softmax with the row maximum
subtracted. Both exponentials take a non-positive argument, so they never
overflow. For the first key, `Delta` is exactly 0.

## The pipeline

```
 q ─┐
    Map x*y ─F─ Reduce(d) + ─F─ Scan(N) max/exp ─F─ fork ─┬─ Reduce(N) acc*Δ+e ─F─ Repeat(d) ─F─┐
 k ─┘                                                      │                                      Map x/y ─ o
                                                     v ────┴─ MemReduce(N) Δ*acc+e*v ─F─ serializer ─┘
```

`F` is a two-entry FIFO (`short_fifo`).

| Node | Module | What it does | Rate |
|---|---|---|---|
| Map `x*y` | `map_mul` | joins the q and k streams and multiplies them | combinational, 1/cycle |
| Reduce (d) | `reduce_sum` | sums each group of `d` products into `s_ij` | 1 result per `d` inputs, registered |
| Scan (N) | `scan_max_exp` | keeps `m` and emits the pair `(Delta, e)` for each score; restarts after `N` scores | combinational, 1/cycle |
| fork | `stream_fork` | gives each pair to both reductions; each output accepts on its own | no latency |
| Reduce (N) | `reduce_rescale` | builds `r_iN` | 1 result per row, registered |
| Repeat | `repeat_n` | gives `r_iN` once for each of the `d` output elements | 1/cycle |
| MemReduce (N) | `mem_reduce` | holds the `d`-entry accumulator `l` and updates all lanes per token | 1 token/cycle, 1 vector per row |
| serializer | `vec_serializer` | sends `l_iN` out one element per cycle | 1/cycle |
| Map `x/y` | `map_div` | joins `l` and `r` elements and divides | combinational, 1/cycle |

The top level is `sdpa_memfree`.

### Why no long FIFO is needed

Compare this graph with the textbook streaming version. There, each score's
exponential has to wait for the row sum, which arrives `N` scores later, so a
FIFO of depth `N+2` sits beside the reduction. Here, the two reductions
consume the same `(Delta, e)` stream token by token. Each emits one result per
row, in the same cycle. The divider therefore gets both operands together.
The only path with a length difference is the repeated `r` against the
serialized `l`. Both paths have the same structure (FIFO, then a node that
sends one item per cycle), so they stay within a cycle of each other.

### Handshake and timing

Every edge uses valid/ready, and a token moves when both are high. A producer
holds a token until it is taken; an assertion in `short_fifo` checks this.
Nodes without registers (`map_mul`, `scan_max_exp`, `repeat_n`,
`vec_serializer`, `map_div`, `stream_fork`) pass valid forward and ready
backward combinationally. The FIFOs drive `in_ready` and `out_valid` from
registers only, which breaks these paths between nodes. The reductions
register their results, so a result appears one cycle after the last input of
a group. Reset is synchronous and active low (`rst_n`). It clears counters,
accumulators and valid flags, but not the FIFO storage.

Measured at the default size with all inputs always valid: one head takes
1,048,646 cycles, against `N*N*d` = 1,048,576.

## Ports and stream order of `sdpa_memfree`

| Port group | Width | Order of tokens |
|---|---|---|
| `q_valid/q_ready/q_data` | 32 | for i, for j, for k: `q_ik` (row `q_i` is sent again for every key `j`) |
| `k_valid/k_ready/k_data` | 32 | for i, for j, for k: `k_kj`, i.e. `K[j][k]` |
| `v_valid/v_ready/v_data` | `D` x 32 (packed, element k in bits `32k+31:32k`) | for i, for j: row `v_j` |
| `o_valid/o_ready/o_data` | 32 | for i, for k: `o_ik` |

The caller must re-stream `K` and `V` for every query row, and `q_i` once per
key. The array does not store any of them.

Parameters: `N` (sequence length, default 128), `D` (head dimension `d`,
default 64) and `FIFO_DEPTH` (default 2).

## Number format and arithmetic (`sdpa_pkg`)

The paper treats values as real numbers. This RTL uses signed fixed point,
`DATA_W = 32` bits with `FRAC_W = 16` fraction bits, held in type `fx_t`.

* `fx_mul`: full product, shifted right by 16 (rounds toward minus infinity).
* `fx_div`: `(a << 16) / b`, truncated toward zero and saturated to the range
  of `fx_t`. Division by zero gives the largest value with the sign of `a`.
  The denominator `r_iN` is always at least about 1, because the key that
  holds the final maximum contributes `e = 1`.
* `fx_exp_neg(x)`, for `x <= 0`, computes `2^(x * log2 e)`. The integer part
  of the exponent becomes a right shift. The fraction `f` goes through
  `1 + C1 f + C2 f^2 + C3 f^3` with `C1 = 45576/2^16`, `C2 = 14872/2^16` and
  `C3 = 5072/2^16`. These coefficients are a least-squares fit of
  `2^f - 1 = C1 f + C2 f^2 + C3 f^3` on `[0, 1)`, which keeps `exp(0) = 1`
  exact. The absolute error is about `1.3e-4`.
* Score differences that overflow 32 bits saturate to the most negative
  value; its exponential is 0.

With `q`, `k` and `v` in `[-1, 1)` and `d = 64`, the outputs agree with a
double-precision softmax to within `4e-3`. The error comes mostly from
truncating the `d` products of each score.

## Storage

At the defaults, the intermediate state is:

* six 2-entry FIFOs:
  * four of 32 bits, for the products, the scores, the row sum and the
    repeated row sum;
  * one of 64 bits, for the `(Delta, e)` pair;
  * one of 2048 bits, for the output row;
* the 64 x 32-bit `mem_reduce` accumulator and its output register;
* the running maximum and a few counters.

Apart from counter widths, none of this depends on `N`. `d` sets the width of
the vector path.

## What follows the paper and what does not

The node graph, the function of each node, the placement of FIFOs and their
depth of two all follow the memory-free design of the paper. The following
are this design's own choices, made where the paper says nothing or is
inconsistent:

* **Sizes.** The paper gives no `N` or `d`. The defaults `N = 128` and
  `d = 64` are assumptions.
* **Repeat count.** The paper's diagram labels the node after the row-sum
  reduction `Repeat (N)`. The divider after it consumes the `d` elements of
  one output row, so the count here is `d`. The two are the same only when
  `N = d`.
* **Serializer.** The paper's diagram connects the vector reduction straight
  to the divider. Here `vec_serializer` lets one scalar divider handle the
  row. A `D`-lane divider would be the alternative.
* **Fork.** The diagram only draws the stream branching. `stream_fork` is an
  eager fork, with a flag that remembers which consumer has already taken the
  token.
* **Final division.** The paper's last equation divides "`v_iN`" by `r_iN`.
  The accumulated vector is `l_iN`, and that is what is divided here.
* **Arithmetic.** The fixed-point format, the exponential approximation,
  rounding and saturation are all choices of this design.
* **Not built.** The physical array the nodes would be mapped onto (compute
  and memory units, the on-chip routes between tiles) is shown in the paper
  only as a sketch. It is not built, and neither are the memories that would
  hold `Q`, `K` and `V`. These matrices enter as streams. The mask and
  dropout stages of a full transformer layer are not part of this algorithm.
* **Baselines.** The row-maximum versions with a long FIFO, which the paper
  uses as baselines, are not included.

## Simulating

Every testbench checks itself. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. Example
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/sdpa_pkg.sv \
    tb/tb_sdpa_memfree.sv --top-module tb_sdpa_memfree -o sim
./obj_dir/sim
```

| Testbench | Covers |
|---|---|
| `tb_map_mul`, `tb_map_div` | arithmetic against real-valued reference, saturation, join handshake |
| `tb_short_fifo` | full rate, capacity of 2, order under random traffic |
| `tb_stream_fork` | each consumer gets every token once, with independent acceptance |
| `tb_reduce_sum`, `tb_reduce_rescale` | group results against references, one input per cycle |
| `tb_scan_max_exp` | `(Delta, e)` against the real-valued recurrence; `Delta = 0` at row start; rescale events |
| `tb_repeat_n` | copies and rate |
| `tb_vec_serializer` | element order and rate of the serializer |
| `tb_mem_reduce` | vector recurrence with independently gapped input streams |
| `tb_sdpa_memfree` | whole pipeline at `N = 8`, `d = 4` (see below) |
| `tb_sdpa_memfree_full` | the same test at the default `N = 128`, `d = 64`; about 3.2 M cycles, a few seconds |
| `tb_sdpa_fifo_depth` | FIFO-depth experiment: depth 2 against depth 64 at `N` = 4, 16, 48 (uses the helper `sdpa_harness`) |

Each top-level test runs two heads and checks every output against a
double-precision attention.

* **Head 1** runs at full rate and must finish within `N*N*d + d + 32`
  cycles.
* **Head 2** adds random gaps on all inputs and random output stalls. The
  value stream is starved, so that the fork's consumers accept in different
  cycles.

The tests also count how often each mechanism acts: a rescale by a growing
maximum, a full FIFO, a repeat of the row sum, an output stall and a split
fork. A test fails if any of these never happens.

### FIFO depth and storage

`tb_sdpa_fifo_depth` repeats the paper's central experiment on this RTL. It
runs the pipeline with its depth-2 FIFOs next to a copy with 64-deep FIFOs,
which stands in for unbounded buffering.

| `N` (d = 8) | cycles, depth 2 | cycles, depth 64 | `N*N*d` | peak FIFO occupancy |
|---|---|---|---|---|
| 4 | 142 | 142 | 128 | 1 |
| 16 | 2062 | 2062 | 2048 | 1 |
| 48 | 18446 | 18446 | 18432 | 1 |

The cycle counts are identical and the peak occupancy stays at 1 for every
`N`. Shallow FIFOs cost no throughput, and the buffering needed does not grow
with the sequence length.

## Changing it

To change the size, set `N` and `D` on `sdpa_memfree`. The counters size
themselves from `N` and `D`. The number format is set by `DATA_W` and
`FRAC_W` in `sdpa_pkg`. The exponential's coefficients are 16-bit constants,
re-aligned to `FRAC_W`. Only the default Q16.16 format has been simulated.
