# A linear Taylor-attention accelerator for vision transformers

Softmax attention costs time and memory that grow with the square of the token count n. In a
vision transformer n is fixed by the image (197 tokens for DeiT, for example), so the square term
dominates. The ViTALiTy approach replaces each exponential in the softmax with its first-order
Taylor term, after the keys have been mean-centred. With exp(x) ≈ 1 + x the attention becomes
*linear*: the n × n matrix QKᵀ is never formed. The matrices are multiplied in the order
Q(K̂ᵀV) instead, at a cost of O(n·d²) rather than O(n²·d). The sparse "strong attention" part
that the method adds during training is dropped at inference, so the hardware computes only the
linear term.

This repository holds synthesizable SystemVerilog for an accelerator that computes that linear
Taylor attention for one attention head. It follows the architecture published with the method:
a 64 × 64 input-stationary systolic array split into *SA-General* and *SA-Diag*, 64-lane
accumulator, adder and divider arrays, four 50 KB buffers, and an intra-layer pipeline that hides
most of the pre- and post-processing behind the matrix products. Where the published description
stops (number format, buffer ports, how operands reach the array, where G is kept), this code
makes its own choices. Those choices are listed in [Departures and own choices](#departures-and-own-choices).

## The arithmetic

For one head with queries Q, keys K and values V (each n × d):

| Step | Quantity | Unit that computes it |
|---|---|---|
| 1 | mean = (1ᵀK)/n ; K̂ = K − 1·mean | accumulator array, divider array (one shared divisor), adder array |
| 2 | G = K̂ᵀV (d × d) | SA-General, V stationary |
| 3 | k_sum = 1ᵀK̂ ; v_sum = 1ᵀV | accumulator array, while steps 1–2 run |
| 4 | t_D = n√d + Q·k_sumᵀ (one value per query) | SA-Diag, then an extra adder |
| 5 | T_N = √d·v_sum + QG | SA-General with G stationary, then the adder array |
| 6 | Z = T_N / t_D, row by row | divider array, one divisor per lane |

Step 6 is the first-order softmax, (√d + q·k̂)/(n√d + q·Σk̂), applied to all keys at once. k_sum
is mathematically zero, because the keys are centred. The hardware still computes it, because
the mean is truncated.

## Block structure

```
 ld_* ──► Q buf ─┐                       ┌──────────── systolic_array ────────────┐
 ld_* ──► K buf ─┼─► accumulator_array   │ staging regs ─► SA-Diag  │ SA-General   │
 ld_* ──► V buf ─┘   adder_array ───────►│  (one shift   (64 × 1)   │ (64 × 64)    │
                     divider_array       │   register    k_sum       │ V, then G    │
                                         │   per row)    stationary  │ stationary   │
                                         └─────┬──────────────┬─────────────┬───────┘
                G buffer (64×64×32) ◄──────────┼──────────────┘ columns     │
                                               ▼ Q·k_sumᵀ        (Step 2)   ▼ QG (Step 5)
                                         extra adder ─► t_D ─► divisor chain
                                         adder lanes ─► T_N ─► divider lanes ─► de-skew ─► O buf ─► o_*
```

| File | Block |
|---|---|
| `rtl/vit_pkg.sv` | widths, enums (`div_mode_e`, `feed_mode_e`, `op_e`), the command struct `cmd_t`, `sat()` |
| `rtl/pe.sv` | processing element: stationary operand, multiply, add partial sum from above |
| `rtl/sa_general.sv` | DIM × DIM grid of PEs |
| `rtl/sa_diag.sv` | DIM × 1 column of PEs with broadcast inputs |
| `rtl/systolic_array.sv` | both sub-arrays, input staging registers, output row tags |
| `rtl/accumulator_array.sv` | DIM column-sum lanes, two banks |
| `rtl/adder_array.sv` | DIM add/subtract lanes plus the extra adder for t_D |
| `rtl/divider_array.sv` | DIM dividers, single-divisor and multiple-divisors patterns |
| `rtl/sram_buffer.sv` | one 400-row × 1024-bit buffer (50 KB) |
| `rtl/vitality_ctrl.sv` | phase sequencer |
| `rtl/vitality_top.sv` | the accelerator: buffers, arrays, G buffer, de-skew, wiring |

## How data moves through the systolic array

This is the least obvious part of the design. Every matrix product uses the same *down-forward
accumulation* dataflow. One matrix stays in the PEs. The other enters from the left edge, one
row of the array per element, and moves right one PE per cycle. Partial sums move down one PE
per cycle. If element k of an input vector enters row k at cycle t + k, then column c delivers the
vector's dot product with stationary column c at the bottom, DIM + 1 + c cycles after t. The
outputs are therefore skewed: column c is c cycles behind column 0.

**Step 2, G = K̂ᵀV.** A chunk of up to 64 V rows (tokens) is loaded as the stationary operand,
token r in PE row r. The input rows are the rows of K̂ᵀ, which are *feature* vectors across
tokens, but the adder array produces K̂ one *token* at a time. The staging registers resolve this.
Each SA row owns a 64-entry shift register. Token r's K̂ row, produced by the adder array in cycle
t₀ + r, is loaded whole into row r's register. From then on the register emits feature 0, 1, 2, …,
one per cycle. Row r thus starts exactly r cycles after row 0, which is the skew the array needs.
No transpose buffer is required, and a K̂ row enters the array in the cycle after it is produced.
This is the overlap of Steps 1 and 2 that the pipeline relies on. Column c then delivers G(i, c)
for feature i = 0 … 63. These partial results are added into a 64 × 64 G buffer, since n tokens
take ⌈n/64⌉ chunks. Tokens past n in the last chunk are zeroed.

**Steps 4–6.** The G buffer, requantised to 16 bits, becomes the stationary operand of
SA-General, and k_sum becomes that of SA-Diag. Each Q row is read once and scattered so that
element k enters staging register k at position k, which skews it by k cycles. The same staged
element feeds row k of both sub-arrays (broadcast). SA-Diag's result for query i therefore leaves
in the same cycle as column 0 of QG for query i.

**Fused post-processing.** Column c's output goes straight to adder lane c (+√d·v_sum(c)). SA-Diag's
output goes to the extra adder (+n√d), which produces t_D(i). t_D(i) enters the divider array's
*Divisor Regs*, a shift chain that moves one lane per cycle. Lane c's dividend T_N(i, c) arrives c
cycles after lane 0's, and t_D(i) reaches lane c in the same cycle. The skew of the array is thus
used, not undone, and each lane divides by its own divisor. Only after the division does a
triangular delay line (lane c delayed by 63 − c cycles) line the lanes up into one Z row for the
O buffer. While Q streams, one Z row is written per cycle.

**Row tags.** The staging logic does not know which output row a partial sum belongs to. A
(valid, index) tag is therefore given together with the first staged element of each output row.
It is delayed by the array height and then shifted one column per cycle, alongside the partial
sums. `col_valid[c]`/`col_idx[c]` say which row `col_psum[c]` holds in each cycle. The G buffer
and the O-buffer address are driven by these tags.

## Schedule of one head

`vitality_ctrl` issues one command per cycle. The datapath delays each command by one or two
cycles to meet the one-cycle buffer read latency.

| Phase | Cycles | Work |
|---|---|---|
| KSUM | n | K rows → accumulator bank 0 (1ᵀK) |
| KMEAN | 5 | divider, single divisor n → mean; bank 0 cleared |
| per chunk: VLOAD | 64 | V rows → SA-General operands; bank 1 += V (v_sum) |
| per chunk: KSTREAM | 64 | K rows → adder (K − mean) → staging registers; bank 0 += K̂ (k_sum) |
| per chunk: KDRAIN | 130 | wait until the last column has delivered 64 G rows |
| GLOAD | 64 | G rows (clipped to 16 bits) → SA-General, k_sum → SA-Diag |
| QSTREAM | n | Q rows in; Z rows start leaving after about 2·64 cycles |
| QDRAIN | ≈133 | until n Z rows have been written |

Total: **2n + 3·DIM + 10 + ⌈n/DIM⌉·(4·DIM + 2) cycles**. A DeiT head (n = 197, d = 64) takes 1628
cycles, or 3.3 µs at the 500 MHz that was used for the published area and power figures. The
pre-processing overhead (KSUM, KMEAN) and the post-processing tail (QDRAIN) correspond to the two
overheads in the published pipeline drawing. Chunks do not overlap: the V operands of the next
chunk are loaded only after the previous chunk has drained. That is the main source of idle
array time in this implementation.

## Number format

All buffer words and PE operands are 16-bit signed fixed point, Q8.8 (`FRAC_W = 8`). Products
(Q16.16) are summed in 32-bit partial sums (`ACC_W`), which wrap on overflow. Before G and k_sum
become 16-bit PE operands, G is shifted right by 8 and clipped, and k_sum is clipped.
Post-processing runs at product scale: T_N and t_D are 32-bit with 16 fractional bits. The
dividend T_N·2⁸ is 40 bits, and the quotient is Q8.8, truncated toward zero and clipped. A zero
divisor gives the largest value of the dividend's sign. √d is a left shift by `log2_sqrt_d`, so d
must be 16, 64 or 256. For random inputs in [−1, 1), Z stays within 0.004 of real-valued Taylor
attention (one LSB is 0.0039).

## Interface (`vitality_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `ld_we`, `ld_sel`, `ld_addr`, `ld_data` | in | 1, 2, 9, 1024 | write one token row into Q (`sel` 0), K (1) or V (2); element c in bits [16c+15:16c] |
| `start`, `n_tokens`, `log2_sqrt_d` | in | 1, 9, 4 | run one head of 1 … 400 tokens |
| `busy`, `done` | out | 1 | `done` pulses for one cycle at the end |
| `o_re`, `o_raddr`, `o_rdata` | in/in/out | 1, 9, 1024 | read a Z row, one cycle latency |

A head with d < 64 stores zeros in the unused lanes. Keys and values may have different widths:
LeViT uses a key dimension of 16 and a value dimension of 32 or 64. The host is responsible for
not writing the buffers while `busy` is high.

Parameters: `DIM` (64) sets the array size and the lane count. `DEPTH` (400) sets the rows per
buffer. Widths are in `vit_pkg`.

## Departures and own choices

Taken from the published design: the block set and sizes (64 × 64 SA-General, 64 × 1 SA-Diag,
three 64-lane 16-bit processor arrays, four 50 KB buffers), the down-forward accumulation dataflow
with V, then G and k_sum, stationary, the Q broadcast to both sub-arrays, the divider's two
patterns with a shared Reg(n) and a chain of Divisor Regs, the extra adder for t_D, and the order
and overlaps of the pipeline steps.

This design's own choices:
- the Q8.8 format and all widths above 16 bits;
- the 64-row chunking and zero padding of the token dimension;
- the staging shift registers and the row tags;
- the G buffer held in registers;
- the two-bank accumulator lanes;
- the combinational dividers with a two-cycle latency;
- the buffer ports;
- √d as a shift.

Not built:
- DRAM and the NoC: only named, so the buffer ports are the top-level ports;
- reuse of the systolic array for the QKV projections and the MLP;
- sequencing of several heads or layers;
- the sparse attention used only in training.

The published pipeline has the accumulator array build k_sum and v_sum while K̂ is being produced.
Here each accumulator lane has one adder and two banks. v_sum is therefore summed while a V chunk is
loaded, and k_sum while that chunk's K̂ rows stream. Both still overlap the G computation, but not
each other.

In the published drawing of the G = K̂ᵀV dataflow, SA-Diag holds an extra V column. With d = 64,
V has no 65th column, so SA-Diag is idle in Step 2 here.

Heads whose d is not a power of four (most MobileViT heads) cannot be computed exactly, because of
the √d shift.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench compares the block with a model
computed independently in the testbench, and ends with a `TB_RESULT checks=N failures=M` line.

- `tb_pe`, `tb_sa_general`, `tb_sa_diag`: results and the exact cycle each output appears.
- `tb_systolic_array`: both feed modes, tags, and SA-Diag in step with column 0.
- `tb_accumulator_array`, `tb_adder_array`, `tb_divider_array`: per-lane models, including the
  skewed divisor chain, zero divisors and clipping.
- `tb_sram_buffer`, `tb_vitality_ctrl`: exact command sequence, including padding.
- `tb_vitality_top` (8 × 8 array; 37 and 8 tokens) and `tb_vitality_full` (default 64 × 64; 197 and
  64 tokens): share `vit_e2e_test`. These compare every Z element with a bit-exact model of the
  fixed-point algorithm and with real-valued Taylor attention. They check the cycle count and
  that Z rows leave one per cycle. They count each mechanism and fail if one never happens: several
  chunks, zero padding, both divider patterns, K̂ rows entering while earlier rows are in flight,
  and Z rows written while Q still streams.

Simulating with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/vit_pkg.sv tb/tb_vitality_top.sv \
          --top-module tb_vitality_top -Mdir obj -o sim && obj/sim
```

The same works for any other testbench. The full-size test takes about 3.5 minutes to build and
under a second to run.
