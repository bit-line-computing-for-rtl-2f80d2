# Bit-line computing CNN accelerator

CNN inference is mostly multiply-accumulate, and it spends most of its energy moving
operands between memory and arithmetic units. This design does the arithmetic inside the
SRAM instead. When two word lines are raised together, the shared bit lines compute
AND on the true bit line and NOR on the complement bit line. A small adder circuit at the
foot of each column turns those two signals into a full adder. So a single memory cycle
computes `add(A, B)` of two stored words and writes the sum back.

On top of that primitive, multiplication is done as shift-add, walking over the bits of
one operand. That operand is the *broadcasted operand* (BO). It comes from outside and is
the same for every subarray. The other operand is the *in-memory operand* (IMO). It stays
in the array. Many subarrays run the same shift-add sequence at once on different IMOs,
so they compute many output values of a convolution or fully-connected layer in parallel.

Three tricks cut the number of cycles:

* **Embedded shifts.** The read port of each local group can shift a word right by up to
  `NES = 3` places as it reads it. A run of zero BO bits can then merge with the next
  addition.
* **Zero skipping.** A BO of value zero issues no operations at all.
* **GCW weights.** The weights (the BOs in convolutions) are stored in a variable-length
  code. Small and zero values get short codes, so fewer memory words have to be fetched.

The RTL is synthesizable SystemVerilog-2017. The shared types and sizes are in `bc_pkg`.

## Storage: local groups and the subarray (`bc_local_group`, `bc_subarray`)

A subarray has `N_LG = 5` local groups (LGs) of `LG_ROWS = 32` rows. Each row has 32
columns. They hold two 16-bit words, bit-interleaved: bit `i` of way `w` sits in column
`2i+w`. A per-LG column multiplexer picks the way. So a subarray holds 160 rows and 320
words. Word address `a` is in row `a/2` and way `a%2`. Row `r` is in LG `r/32`.

Raising two rows in the same LG is not reliable in silicon, so the two operands of one
operation must come from different LGs. `bc_subarray` checks this with an assertion. This
has a direct effect on mapping: the partial product word `P` and the running sum `S` must
sit in different LGs from each other and from the IMOs they are combined with.

In the model the array read is combinational and the write happens at the clock edge. A
whole operation therefore takes one cycle: read both operands, add, write back. The
subarray output `dout` is registered, so a read result appears one cycle after the
operation. The real circuit may need a second cycle for the write-back. This model has
one write per cycle, and the shift-add step count is the cycle count.

## The LG read port: shift and negate (`bc_lgp`)

Each LG drives the global bit lines through its own read port. The port receives
`en`, `sh` (0..3) and `neg`, and works like this:

* Bit `k` of the driven word is `lbl[min(k+sh, top)]`. This is an arithmetic right shift:
  the sign bit is copied into the vacated top positions.
* `top` is 15 in 16-bit mode. In 2x8-bit mode it is 7 for the low half, so the low
  sub-word extends its own sign instead of taking the high sub-word's LSb. This is the H1
  multiplexer.
* `neg` inverts the word. With a carry-in of 1 at the adder, this gives the two's
  complement.
* A disabled port drives all zeros, so `add(X, 0)` is a shift or copy of `X`.

## The bit-line compute unit (`bc_bcu`)

For each column, the sum and carry are built from the two bit-line results
`and = a&b` and `nor = ~(a|b)`:

```
p    = ~(and | nor)        // a ^ b
sum  = p ^ c[k]
c[k+1] = and | (p & c[k])
```

The carry ripples from bit 0 to bit 15. At bit 8 the H2 multiplexer picks between the
carry from bit 7 (16-bit mode) and the operation's carry-in (2x8-bit mode). In 2x8 mode the
two bytes are two independent 8-bit additions, so one cycle does two MACs' worth of
work. `add_sel` picks the sum, or `~nor` (the OR of the raised words, a plain read when
only one is raised). The write amplifier writes either the result or external data
(`DATA_IN`).

## Fan-out: H-tree and array (`bc_htree`, `bc_array`)

`bc_array` holds `NSUB = 128` subarrays behind `bc_htree`. During compute, each operation
is *broadcast* to all subarrays. For loading IMOs and reading results, `bcast = 0` and the
operation goes only to subarray `sel`. The return path is a binary multiplexer tree on
`sel`. The tree is combinational. `NSUB` must be a power of two and at least 2.

## Shift-add multiplication and the BC instruction decoder (`bc_instr_decoder`)

Both operands are fixed-point Q1.n fractions: an IMO is Q1.15 (or Q1.7 per half in 2x8
mode), and a BO has `N <= 8` bits. The product `P = IMO × BO` is built LSb first over the
BO bits `b0 .. b(N-1)`:

```
non-sign bit b_i :  P <= RSh(P) + b_i · RSh(IMO)
sign bit b_(N-1) :  P <= P      - b_(N-1) · IMO      (IMO negated, carry-in = 1)
```

Each right shift of `P` drops one LSb. This keeps the result in Q1.15 at the cost of
truncation. The decoder groups the bits so that each group is one operation. A group is
`m` zero bits (`m <= NES-1`) followed by a terminal bit `t`:

| group | operation |
|---|---|
| terminal not the MSb | `P <= RSh^(m+1)(P) + t · RSh(IMO)` |
| terminal is the MSb  | `P <= RSh^m(P) - t · IMO` |

The first operation of a product has `P` disabled, which treats it as zero. So no clear
cycle is needed per product. After the last group the decoder issues an accumulate,
`S <= S + P`. The product of one (IMO, BO) pair is therefore finished in
(number of groups + 1) cycles. A last group that would be only `add(P, 0)`, with a zero
MSb and no shift, is dropped and the accumulate takes its place. A zero BO produces no
operations. It only takes one cycle to hand over to the next BO, and the decoder flags it
on `zero_skip`.

Example (NES = 3, N = 5): IMO = `0.0100110` (0.296875) and BO = `1.0011` (-0.8125),
read LSb first. The BO splits into three groups:

* `b0 = 1`, which gives `P <= RSh(IMO)`;
* `b1 = 1`, which gives `P <= RSh(P) + RSh(IMO)`;
* `b2 b3 b4 = 0 0 1`, ending in the sign bit, which gives `P <= RSh^2(P) - IMO`.

The result is `1.1100001` in Q1.7, which is -0.2421875 (the exact product truncated). It
takes three shift-adds instead of five. The unit testbench checks this example.

## GCW weight code (`gcw_shift_register`, `gcw_decoder`)

Convolution weights are stored as a bit stream in the *GCW* code:

| value `A` | code | length |
|---|---|---|
| 0 | `0` | 1 |
| -8..7, not 0 | `1 & bin4(A)` | 5 |
| other | `1 0000 & binN(A)` | N+5 |

The `1 0000` prefix cannot be confused with a short code, because `bin4(0)` is never
used. Each filter's stream starts on a 32-bit memory word boundary. In each memory word
the first code bit is bit 31.

`gcw_shift_register` keeps a 64-bit buffer, oldest bit at the top, and shows the top 13
bits as the window `GCW<12:0>`. This is the longest possible code, 5+8. After each
consumed code it shifts by `code_len`. It asks for the next memory word whenever fewer
than 13 bits would remain. At the end of a filter (`mem_last`) it lets the shorter tail
drain. A `flush` drops any leftover bits when a new filter starts.

`gcw_decoder` is combinational:

```
sel0 = GCW<12>
sel1 = ~|GCW<11:8>
code_len = !sel0 ? 1 : (!sel1 ? 5 : N+5)
value    = !sel0 ? 0 : (!sel1 ? sext(GCW<11:8>) : sext(GCW<7:8-N>))
```

## Controller and run mapping (`bc_controller`)

One run computes a dot product of `num_bo` terms in every subarray at the same time:

```
S = Σ_j IMO[imo_base + j] × BO_j
```

Memory layout is as follows:

* The IMOs of a run are at consecutive word addresses starting at `imo_base`. This
  matches the order in which the BOs arrive.
* `P` (`p_addr`) and `S` (`s_addr`) are two scratch words in different LGs.

The controller works as three states:

* **IDLE:** the host port drives the array directly. It can broadcast or select one
  subarray, write `DATA_IN`, read, or issue any BC operation. Loading IMOs, reading
  results, merging partial convolutions and scaling results are all done this way.
* **CLEAR:** one cycle at `start`, which writes 0 to `S`.
* **RUN:** each instruction from the decoder becomes one broadcast BC operation. Its
  `P` operand is `p_addr`, its IMO operand is `imo_base + j` for the current BO `j`, and
  the accumulate step adds `P` into `S`. `done` pulses when all BOs are consumed and the
  decoder is idle.

The controller asserts that `P` and `S` are in different LGs. Keeping each IMO out of the
LGs of `P` and `S` is the mapping's job. With the 320-word subarray, that leaves room for
up to 318 IMO words per run in 16-bit mode. Longer filters (for example an 11×11×3
filter, which has 363 weights) run as partial convolutions. Their `S` words are then added
by host operations.

## Top level (`bc_accel_top`)

`bc_accel_top` chains:

```
weight memory words → gcw_shift_register → gcw_decoder → bc_instr_decoder → bc_controller → bc_array
```

It has two modes:

* **Convolution mode (`mode_fc = 0`):** the weights are the BOs and come GCW-coded
  through `wmem_*`, a valid/ready word stream with a `last` flag. `stall` is high in
  cycles where the decoder wants a weight but the window is not yet valid.
* **FC mode (`mode_fc = 1`):** the roles swap. The weights are stored in the array, and
  the input activations arrive uncoded as BOs on `bo_*`.

The other controls are:

* `mode2x8` selects 2×8-bit word parallelism.
* `quant_n` is `N`.
* `num_bo`, `imo_base`, `p_addr` and `s_addr` describe the run.

All configuration inputs must stay stable from `start` to `done`. The weight memory itself
is outside the design.

## Where this departs from the paper's description

* Write-back is in the same cycle as the addition. The paper's circuit may need an extra
  cycle.
* There is a separate accumulate step `S += P` for each non-zero BO. The paper does not
  say how products are accumulated.
* A zero BO costs one hand-off cycle instead of none.
* The controller, the memory layout of IMOs, `P` and `S`, the stream handshakes, the host
  port, the 64-bit shift buffer and the bit order in a memory word are this design's own
  choices. The paper names these parts without giving their insides.
* Output scaling (for dropped MSbs) and the merging of partial convolutions are not done
  by hardware. They are left to host-issued BC operations.
* Sense amplifiers, precharge and the electrical side of multi-row activation are not
  modelled. A bit line in the model is an ideal logic AND/NOR.
* A configuration with a single subarray is not supported, because `NSUB >= 2` is
  required.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>`. They compare against the reference functions in
`tb/tb_ref_pkg.sv`: exact NES-grouped Q1.n shift-add products, GCW encoding and random
quantised weights. What they cover:

* The GCW examples for N = 6.
* The NES = 3 grouping example in both 16-bit and 2×8-bit modes.
* Random operations on the LG port, the BCU, the subarray and the H-tree.
* Shift-register refill against a bit-exact model.

There are two end-to-end testbenches:

* `tb_bc_accel_top` runs an 8-subarray array. It counts each mechanism it exercises:
  stalls, zero skips, codes of each length, multi-shift merges, two's-complement steps,
  2x8 mode and FC mode.
* `tb_bc_accel_top_full` runs the default 128-subarray top on a 27-term (3×3×3 filter)
  dot product.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/bc_pkg.sv tb/tb_ref_pkg.sv tb/tb_bc_accel_top.sv --top-module tb_bc_accel_top
./obj_dir/Vtb_bc_accel_top
```

The full-size top takes about two minutes to compile and runs in about a second.
