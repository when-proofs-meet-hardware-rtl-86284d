# A ZeroCheck accelerator with two back ends: NTT and SumCheck

A ZeroCheck proves that a constraint polynomial, for example
`f = g1*g2 + g3`, is zero on every point of a domain of size `N = 2^n`. Proof
systems do this in one of two ways, and each needs different hardware.

* **Univariate (NTT-based).** The `g_i` are univariate polynomials of degree
  below `N`. The prover computes the quotient `q = f / z_H`, where
  `z_H(x) = x^N - 1` vanishes on the domain. The work is a handful of
  number-theoretic transforms (NTTs, the finite-field FFT), plus some
  element-wise arithmetic between them.
* **Multilinear (SumCheck-based).** The `g_i` are multilinear extensions,
  stored as tables of `2^n` values over the Boolean hypercube. The prover
  runs a SumCheck on `sum_x f(x) * eq_r(x) = 0`. That takes `n` rounds. Each
  round folds every table in half with a challenge, and sums small products
  over the remaining entries.

This RTL builds both machines over the same 255-bit prime field and puts
them side by side in one top level, `zerocheck_top`. That makes it possible
to compare them on equal terms. The field is the BLS12-381 scalar field:
`p = 0x73eda753...00000001`, with 2-adicity 32 and generator 7.

Both machines are *host-sequenced*. The chip holds the data paths, the
on-chip memories and the per-pass control. A host drives the passes and
supplies the challenges. In a real prover, the Fiat-Shamir hash and the
off-chip memory sit on the host side of these ports. Nothing here reads
files or calls foreign code. The testbenches play the host.

## Field arithmetic

- `mod_add` adds or subtracts, then does one conditional correction.
- `mod_mul` is a combinational Barrett multiplier with
  `mu = floor(2^510 / p)`:
  - `q = ((a*b >> 254) * mu) >> 256`
  - `r = a*b - q*p`
  - then two conditional subtractions.

  The second subtraction is almost never needed, but it is required for
  correctness. The multiplier is a single combinational cone. A
  1 GHz-class implementation would pipeline it, which would add latency
  to every unit that uses it. Every other unit treats it as one-cycle
  logic in front of a register.

## The NTT machine (`ntt_system`)

### Constant-geometry transform core (`ntt_core`)

The core is memory-based. The input sits in a buffer. Each of the `log N`
stages reads one buffer and writes the other, with `NBF` butterflies
(`ntt_butterfly`: `x = a + w*b`, `y = a - w*b`) working in parallel.

The core uses Pease's *constant-geometry* ordering, so every stage has the
same address pattern:

- Butterfly `j` reads elements `j` and `j + N/2`.
- It writes elements `2j` and `2j + 1`.
- Its twiddle in stage `s` is `omega^bitrev(j mod 2^s)`. The bit reversal
  is over `LOGN_MAX - 1` bits. `omega` is the `2^LOGN_MAX`-th root of unity
  whose powers are loaded into `twiddle_mem`.
- A smaller runtime size `N = 2^log_n` uses the same table. The masking
  `j mod 2^s` selects the right subgroup on its own.

Input is in natural order and output is bit-reversed. The store engine
reverses it back.

Buffers hold rows of `NBF` elements (`ntt_buffer`). Each cycle reads two
rows, `j..` and `j+N/2..`, and writes two rows, so one row operation feeds
all butterflies. Four buffers surround the core:

1. **Prefetch.** Stage 0 reads it.
2. **Ping.** Intermediate stages alternate between ping and pong.
3. **Pong.**
4. **Result.** The last stage writes it.

After stage 0 the prefetch buffer is free again, and the core reports this
with `src_free`. So the next polynomial can be loaded while the current
one is still being transformed.

Timing is `log_n * (N/(2*NBF) + 2)` cycles per transform. The `+2` is the
butterfly pipeline draining between stages, which is needed because stage
`s+1` reads what stage `s` wrote. `log_n` must be at least
`log2(NBF) + 1`.

### Element-wise units and the inverse transform (`ew_unit`)

One unit sits in front of the prefetch buffer (pre) and one sits behind
the result buffer (post). Each element of a stream is multiplied by a
geometric sequence `s_i = s0 * ratio^i`, which is generated on the fly
with one multiplier. In FMA mode the pre unit computes `(a*b + c) * s_i`.
This one mechanism covers every element-wise step of the protocol:

| step | unit | setting |
|---|---|---|
| coset shift `g_i(x) -> g_i(g*x)` | pre | `s0 = 1`, `ratio = g` |
| quotient on the coset | pre, FMA | `(g1^*g2^ + g3^) * 1/(g^N - 1)` |
| iNTT scaling | post | `s0 = 1/N` |
| iNTT and un-shift together | post | `s0 = 1/N`, `ratio = g^-1` |
| four-step inter-step twiddles | post | `ratio = omega_N^n2` for column `n2` |

On the coset, `z_H` is the constant `g^N - 1`, so dividing by it is a
multiplication by one constant.

An inverse NTT does not need a second twiddle table. The store engine
(`st_inv`) emits element `(N - k) mod N` as element `k`, and the post unit
applies `1/N`.

### The univariate ZeroCheck as a sequence of passes

For `f = g1*g2 + g3` the host runs:

1. An iNTT of each `g_i`, from evaluations to coefficients. Each load
   overlaps the previous transform.
2. A coset NTT of each `g_i`: load with the pre unit's coset shift, then
   transform.
3. A load of all three coset evaluations together through the pre unit in
   FMA mode, then a transform with the inverse store and `1/N * g^-i`
   post-scaling. The result is the coefficients of `q`.

The testbench checks `q(x) * (x^N - 1) = f(x)` at random points. Products
of more than two polynomials take more FMA passes through the same unit.

### Four-step NTT

A transform of `N = R * C` points that is larger than the buffers is done
in four steps:

1. `C` NTTs of `R` points each, over strided columns.
2. Multiplication by `omega_N^(n2*k1)`. The post unit does this with
   `ratio = omega_N^n2`.
3. `R` NTTs of `C` points each.
4. Reading out in transposed order.

The host does the gathering and transposition, which would be DRAM traffic
in a real system. The hardware supports mini-NTTs up to `2^LOGN_MAX`
points. The testbench runs a `2^6`-point four-step transform at the
reduced size and a `2^12`-point one at the default size, and checks both
against a direct DFT.

## The SumCheck machine (`sumcheck_system`)

### Round structure

Round `i` binds the most significant remaining variable. The table of size
`M` is read as pairs `(j, j + M/2)`. For each pair and each point
`X = 0..NPTS-1`:

1. **Update** (`mle_update`, from round 2 on). Each entry folds with the
   previous challenge: `e = lo + alpha*(hi - lo)`.
2. **Extension** (`ext_engine`). The engine computes
   `v(X) = e0 + X*(e1 - e0)` by repeated addition, with no multiplier.
3. **Pack and select** (`pack_select`). Each of the four factor inputs of
   each product lane selects the constant 1, the Tmp MLE, or any slot's
   extension.
4. **Product lanes** (`product_lane`). Each lane multiplies four factors
   per point with a two-level tree (three multipliers per point).
5. **Accumulate** (`acc_regs`). One accumulator per lane and point. The
   round polynomial `G_i(X)` is the sum over lanes, and it goes to a FIFO
   (`round_fifo`). The host hashes it into `alpha_i`.

### In-place update layout

Folding and pair reading are fused. In round `i+1` the engine reads four
entries from each bank: `j`, `j+M`, `j+M/2` and `j+M/2+M`, where `M` is
the new size. The update produces the new entries `j` and `j+M/2`, which
are exactly the pair that round `i+1` needs. Those two values are written
back in place. So each `mle_bank` has four read ports and two write ports.

After the last round, one more fold with `alpha_n` (`round_final`) leaves
each MLE evaluated at `(alpha_1..alpha_n)` in entry 0 of its bank. Those
are the values the prover opens.

A crossbar (`mle_crossbar`) binds banks to slots, so tables can be placed
in any bank.

### Build MLE

`build_mle` writes `eq_r(x) = prod_k (r_k x_k + (1 - r_k)(1 - x_k))` into a
bank by doubling:

- Start with `T[0] = 1`.
- At level `k`, every entry `e` becomes `e - e*r` at `j` and `e*r` at
  `j + 2^k`. The variable ordering matches the fold order.

It takes `2^n + n + 1` cycles, with one multiplier, and runs while the
host loads the other tables.

### Terms with more than four factors: the Tmp MLE

A lane multiplies four factors. With `eq_r`, `g1*g2*g3*g4` has five. Such
a round takes two passes:

1. **Pass 0.** Lanes marked `lane_to_tmp` write their partial product
   (all `NPTS` points) into `tmp_mle` at the pair index.
2. **Pass 1.** Lanes marked `lane_pass` read the partial product back as
   factor `TMP` and finish the term.

Pass 1 runs over the already-updated tables, with no second update.
`two_pass_seen` reports that this path was used.

### Timing

- A pass over `P` pairs takes `P + 4` cycles: issue, bank read, update,
  extension/lane, then accumulate.
- Round `i` has `P = 2^(n-i)` and one or two passes.
- The round polynomial is available as soon as the pass ends.

### Degree limit

The FIFO carries `NPTS` values of `G_i`. The default `NPTS = 4` (points
0..3) covers degree-3 round polynomials. That means `f` of degree 2 times
`eq_r`, which is every `g1*g2 + ...` workload. Degree-3 and degree-4 `f`
need `NPTS = 5` or `6`. This is a parameter, and the block testbench runs
with `NPTS = 6`.

## Top level (`zerocheck_top`)

The two systems sit side by side with plain ports. `ntt_*` ports belong to
`ntt_system` and `sc_*` ports to `sumcheck_system`. They share nothing, so
both can run at once.

Default parameters:

| parameter | default | meaning |
|---|---|---|
| `LOGN_MAX` | 17 | Tables and transforms up to `2^17`. This is the small-workload size the design targets, and a `2^16` mini-NTT for four-step also fits. |
| `NBF` | 4 | Butterflies, and elements per buffer row. |
| `NSLOT` | 6 | MLE banks and slots: up to 5 polynomials plus `eq_r`. |
| `NLANE` | 4 | Product lanes: up to 4 additive terms. |
| `NPTS` | 4 | Evaluation points per SumCheck round. |

## Where this design departs from the source architecture

- **Step-radix NTT is not built.** It splits non-power-of-two transforms
  such as `3N` into power-of-two pieces. Use the next power of two
  instead.
- **Streaming SumCheck is not built.** That mode loads chunks of every
  table each round, for tables larger than the banks. SumCheck here runs
  only on tables that fit on chip (`n <= LOGN_MAX`). The NTT side streams
  through its load/store engines and four-step passes.
- **Left to the host.** There is one processing element per machine. The
  Fiat-Shamir hash, off-chip memory and the polynomial commitment are
  outside the chip.
- **What the FIFO carries.** In the source architecture, the updated MLE
  values leave the update engines through a FIFO, to be written back to
  the banks or to off-chip memory. Here they are written straight back into
  their bank, in place. The FIFO instead carries the round polynomial to
  the host.
- **Unpipelined arithmetic.** The field multiplier is combinational, so
  the cycle counts above assume each arithmetic unit takes one cycle.
- **No output backpressure.** The NTT output stream has no flow control.
  The host must accept one element per cycle while `st_busy` is high.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_field_pkg` holds a reference field
model for the testbenches, which uses SystemVerilog's `%`. Things to know:

- The NTT tests compare against a direct DFT and check the cycle bound of
  each transform.
- The SumCheck tests check:
  - every `G_i(X)` against a reference prover;
  - `G_i(0) + G_i(1)` against the running claim;
  - the opened values;
  - that the two-pass path ran.
- `tb_zerocheck_top` runs the whole flow at `LOGN_MAX = 6`. It fails if
  any of the following never happened:
  - load/transform overlap
  - inverse store
  - coset scaling
  - element-wise FMA
  - four-step twiddles
  - Build MLE
  - MLE update
  - the Tmp MLE two-pass round
  - the final fold
- `tb_zerocheck_full` runs the same flow on the top at its default
  parameters, with the full 2^17-entry buffers and banks and the full
  twiddle table. The runtime sizes are smaller: N = 2^13 univariate,
  n = 13 multilinear, and a 2^12 four-step. The simulation costs about
  0.6 ms per cycle, because every Barrett multiplier is evaluated each
  cycle. That makes a 2^17 ZeroCheck (about 4 M cycles) too slow for
  routine simulation. The hardware itself is not reduced.

To simulate a testbench:

```
verilator --binary --timing --assert -Irtl -Itb rtl/zk_pkg.sv tb/tb_field_pkg.sv \
    tb/tb_zerocheck_top.sv --top-module tb_zerocheck_top
obj_dir/Vtb_zerocheck_top +verilator+rand+reset+2
```
