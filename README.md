# LUT Tensor Core: a lookup-table matrix unit for low-bit weights

Large language models are often run with weights of 1 to 4 bits and
activations of 8 or 16 bits. Multiplying such mismatched operands on a
conventional tensor core means first converting (dequantizing) the weights up
to the activation format. This design skips the multiplication altogether.
For each group of K = 4 activations, software computes in advance every signed
sum the group can produce with ±1 weights. A weight group is then no longer a
multiplier operand: it is an index into that small table. A W-bit weight is
handled one bit-plane per clock cycle. Each plane's lookup is shifted by its
bit position and accumulated.

The RTL here implements the tensor core of the *LUT Tensor Core*
software-hardware co-design (Mo et al., "LUT Tensor Core: A Software-Hardware
Co-Design for LUT-Based Low-Bit LLM Inference", ISCA 2025). The tile shape is
the one that publication chooses, M2N64K4:

* two activation rows, so two tables;
* 64 weight columns share each table;
* four activations per table.

Table entries are INT8, weights have 1 to 4 bits, and each lookup unit
accumulates in 32 bits.

## The arithmetic the hardware relies on

### Weights as sums of ±1 bit-planes

An unsigned W-bit weight `q` with scale `s` and zero point `z` stands for
`r = s(q − z)`. Software reinterprets it offline as

    q' = 2q − (2^W − 1),   s' = s/2,   z' = 2z + 1 − 2^W

so that `r = s'(q' − z')` still holds. The payoff is that

    q' = Σ_b 2^b · (2·q[b] − 1)

Every bit-plane `b` is now a vector of ±1 values worth `+2^b`. The core only
ever computes dot products of activations with ±1 vectors, and adds them up
with shifts 0, 1, …, W−1. Scale and zero point are applied outside the core,
by the software that consumes the result. For example, for 4-bit weights,
`q = 0..15` becomes `q' = −15, −13, …, 13, 15`.

### The halved table

For activations `a[0..K−1]` there are 2^K sign patterns. A pattern and its
bitwise complement give opposite sums. So the core stores only the 2^(K−1)
patterns in which the top activation `a[K−1]` enters negatively:

    T[j] = −a[K−1] + Σ_{k<K−1} (2·j[k] − 1) · a[k],   j = 0 .. 2^(K−1)−1

With K = 4 and naming `a[3..0]` as A, B, C, D, the eight entries run from
`T[0] = −A−B−C−D` to `T[7] = −A+B+C+D`, and index bit 0 pairs with D.

Take a ±1 pattern `p` (bit k set means weight +1 for `a[k]`). Its dot product
is `T[p[K−2:0]]` when `p[K−1] = 0`, and `−T[~p[K−2:0]]` when `p[K−1] = 1`.
The bitwise NOT depends only on the weights. Software therefore applies it
offline: wherever the top bit of a plane is 1, it inverts the plane's low
K−1 bits. The hardware sees a *remapped* plane `w` and computes only

    w[K−1] ? −T[w[K−2:0]] : T[w[K−2:0]]

This needs a 2^(K−1)-way multiplexer and a conditional negation per unit, and
no inverters on the select path.

### What software hands to the core

The core expects its operands already in this form. It contains no table
builder and no weight converter:

| operand | form | who makes it |
|---|---|---|
| `tables_i[m][j]` | `T[j]` of activation row m, a signed LUT_BIT integer | a precompute kernel, fused with the preceding element-wise operator; for floating-point activations it also quantizes each 8-entry table to INT8 with its own scale |
| `wgt_i[n][b]` | bit-plane b of weight column n, K bits, remapped as above | offline, once per model |
| `acc_i[m][n]` | INT32 starting value (Accum) | previous LMMA or zero |

Each table entry must fit in LUT_BIT bits. With the default of 8, four
activations of up to ±31 always fit. Wider activations rely on the table being
quantized, as the published design does for every high-precision activation
type.

## Inside the tile

```
                 weight_buf  (N groups x W_BIT_MAX planes x K bits)
                     | plane sel = bit index b
                     v  one K-bit plane per column, broadcast down the column
 lut_table_buf  +----------------------------------------------+
 (M tables of   | lut_unit[0][0]  lut_unit[0][1] ... [0][N-1]  |  <- table 0 broadcast
  2^(K-1) x     | lut_unit[1][0]  lut_unit[1][1] ... [1][N-1]  |  <- table 1 broadcast
  LUT_BIT)      +----------------------------------------------+
                               lut_array
 lmma_ctrl: accepts the instruction, loads buffers and accumulators, steps b = 0..W_BIT-1
```

* **`lut_mux_neg`** is one processing element: the multiplexer over the
  2^(K−1) entries plus the conditional negation. It is combinational, with a
  LUT_BIT+1-bit output, so negating −128 gives +128.
* **`lut_unit`** adds the bit-serial path: `acc += (val << b)` on each cycle
  with `en_i`, and `acc = acc_i` on the cycle with `init_i`.
* **`lut_array`** is the M × N grid. Row m receives table m. It is shared by
  all N units of the row, which is where the design gets its table reuse, and
  why N is large (64). Column n receives the current plane of weight n, shared
  by the M units of the column.
* **`lut_table_buf`** stores the M tables: M × 2^(K−1) × LUT_BIT =
  2 × 8 × 8 = 128 bits.
* **`weight_buf`** stores K × N × W_BIT_MAX = 4 × 64 × 4 = 1024 bits. It
  presents the plane chosen by the controller.
* **`lmma_ctrl`** sequences one instruction (next section).
* **`lut_tensor_core`** is the top. It wires the blocks together and has
  plain ports only.

At the defaults, synthesis gives about 5,300 flip-flop bits. Of these, 4,096
are the 128 accumulators; the rest are the two buffers and the controller.

## The LMMA instruction and its timing

One instruction computes `O[M,N] = A[M,K] × W[N,K] + Accum[M,N]`, the LMMA
form `lmma.{M}{N}{K}.{A_dtype}{W_dtype}{Accum_dtype}{O_dtype}`. Its fields
travel as the packed struct `lut_tc_pkg::lmma_instr_t`:

| field | width | meaning |
|---|---|---|
| `m`, `n`, `k` | 8 each | requested tile shape; must equal the core's M, N, K |
| `a_dtype` | 3 | INT8, FP8, INT16 or FP16; informational, because tables are always integers |
| `w_dtype` | 3 | weight bits, 1..4; this many bit-serial cycles |
| `accum_dtype`, `o_dtype` | 2 each | must be INT32 |

Timing, counting clock edges:

1. **Accept.** The core accepts on an edge where `in_valid && in_ready`.
   `instr_i`, `tables_i`, `wgt_i` and `acc_i` are sampled on that edge only.
   The buffers capture the operands and every accumulator takes its Accum.
2. **Run.** On each of the next W_BIT edges, every unit adds its plane-b
   lookup shifted by b, for b = 0, 1, …, W_BIT−1.
3. **Result.** `out_valid` is high from W_BIT+1 cycles after acceptance
   until the edge where `out_ready` is high. `out_o` is stable throughout.
   `in_ready` is high while idle, and also during the cycle the result is
   taken. A dependent instruction can be issued in that cycle, so a chain
   along K runs at one LMMA every W_BIT+1 cycles.

An instruction the core cannot execute is answered one cycle after acceptance,
with `out_err = 1` and `out_o = Accum`. This covers a shape mismatch, more
than four weight bits, and floating-point accumulation or output. Two
assertions in `lmma_ctrl` state the handshake rules. A pending result stays
valid until taken, and no instruction is accepted mid-run.

A GEMM of any size whose K is a multiple of 4, N a multiple of 64 and M a
multiple of 2 runs as a grid of these tiles. For example, the 2048 × 27648 ×
5120 layer used in the publication's kernel study is 1024 × 432 × 1280 LMMAs.
Each takes 2 cycles of array time for 1-bit weights and 5 for 4-bit weights,
counting the load cycle.

## How this RTL relates to the published design

These follow the publication:

* the M2N64K4 shape, K = 4, and INT8 table entries;
* weights of 1 to 4 bits;
* the halved symmetric table;
* no negation circuit on the select bits;
* one cycle per weight bit, with shift by bit position;
* table broadcast along rows and weight broadcast along columns;
* the instruction's operand list and data-type fields.

These are this implementation's own choices, where the publication says
nothing:

* the 32-bit accumulator;
* the instruction encoding;
* the valid/ready handshakes and the extra load cycle;
* processing bit-planes least significant first;
* the rejection of unsupported instructions;
* asynchronous active-low reset of all state to zero.

These are not built:

* **Floating-point accumulation and output.** The instruction format names
  Accum and O types, and per-table quantization gives every table its own
  scale. The publication does not say how those scales are combined in
  hardware. Here only INT32 results exist, and floating-point `accum_dtype`
  or `o_dtype` values are rejected. Software applying scales per K-group
  would issue each LMMA with Accum = 0 and rescale outside the core.
* **The software half of the co-design.** This is table precompute, table
  quantization, weight remapping and the compiler. It appears only as
  reference functions in the testbench package.
* **The surrounding GPU.** This includes register file, shared memory and
  warp scheduling. The core's wide operand ports stand in for register-file
  reads.
* **Weights of more than 4 bits and floating-point weights.** The publication
  mentions these only as future directions.

## Verification

Every block has a self-checking testbench in `tb/`. Expected values come from
`tb/lut_tc_tb_pkg.sv`, which computes tables, remapped planes and dot products
directly from the arithmetic above, not from the RTL's structure:

| testbench | what it establishes |
|---|---|
| `tb_lut_mux_neg` | all 16 sign patterns on 200 random tables give the true ±1 dot product; −128 negates exactly |
| `tb_lut_unit` | random 1–4-bit weights: result = Accum + Σ a·q' after exactly W cycles, and holds afterwards |
| `tb_lut_array` | every (m, n) of a 2 × 8 array gets its own row's table and column's weights |
| `tb_lut_table_buf`, `tb_weight_buf` | capture on load, hold otherwise, correct plane selection |
| `tb_lmma_ctrl` | cycle-exact load/run/result sequence for W = 1..4, stall, illegal instructions, back-to-back issue |
| `tb_lut_tensor_core` | full default core end to end; checks latency W+1. It counts, and requires at least once: each weight width, negated lookups, non-zero Accum, output stalls, an illegal instruction, back-to-back issue, and a K-loop through Accum |
| `tb_lut_table_quant` | floating-point activations: each 8-entry table quantized to INT8 with its own scale, one LMMA per K-group, rescaled outside. Integer outputs are checked exactly, and the rescaled 64-long dot products stay within the quantization error bound (W = 2 and 4) |
| `tb_lut_mpgemm` | a 4 × 128 × 32 mixed-precision GEMM for W = 1..4 tiled onto the default core. It checks against the uint form `2·Σaq − (2^W−1)·Σa` and checks the W+1-cycle chain rate |

Each testbench was also run against a deliberately broken copy of its block,
and each one failed. The breaks were: negation removed, shifter removed,
wrong table broadcast, partial load, reversed plane select, a run one cycle
short, and the plane select tied to 0.

The simulator these were run on has two-state logic. Everything that is read
is reset or driven explicitly.

## Simulating and changing it

From the repository root, with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/lut_tc_pkg.sv tb/lut_tc_tb_pkg.sv tb/tb_lut_tensor_core.sv \
        -Mdir obj -o sim && obj/sim

Replace the last file with any other `tb/tb_*.sv` to run that test. Each
prints `TB_RESULT checks=N failures=0` on success. All run in well under a
second.

The shape and widths are parameters of `lut_tensor_core`: `M`, `N`, `K`,
`LUT_BIT`, `W_BIT_MAX` and `ACC_BIT`. Their defaults live in `lut_tc_pkg`.
The arithmetic holds for any K ≥ 2. If you raise K, widen LUT_BIT, or make
sure the tables are quantized, so that entries still fit. If you raise
W_BIT_MAX, check that ACC_BIT leaves room for `2^W_BIT_MAX × 2^LUT_BIT` per
LMMA plus the K-loop's growth. The instruction's 3-bit `w_dtype` field limits
W_BIT_MAX to 7.
