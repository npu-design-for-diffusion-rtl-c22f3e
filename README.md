# DART: an NPU for diffusion language model inference

A diffusion language model (dLLM) does not produce text one token at a time.
Each generation block of L positions starts fully masked. Over several
denoising steps the model predicts every position at once. After each step a
*sampling* stage commits the k most confident predictions and leaves the rest
masked for the next step. Two kinds of work follow from this:

* **The transformer forward pass.** This is GEMM-heavy, with the usual
  weights and KV cache.
* **The sampling stage.** It is tiny in arithmetic, but it touches B x L x V
  logits on every step: softmax over a vocabulary V of about 126k, argmax,
  top-k over the block, and a masked integer update. On GPUs this stage is a
  large part of the latency.

DART puts both on one chip. A Matrix Machine runs the GEMMs on microscaling
(MX) integer operands. A Vector Machine and a Scalar Machine run the sampling
primitives. The memory is split by data type:

* activations and logit chunks in BF16, in the Vector SRAM;
* weights and KV in MX, in the Matrix SRAM;
* confidence scalars in the FP SRAM;
* token indices and masks in the Int SRAM.

Keeping the domains apart means sampling never converts integers and floats
back and forth through one shared buffer. The KV cache is quantized to MX
after Block-Adaptive Online Smoothing (BAOS), which takes out the per-channel
outliers that dLLMs show and that move from one generation block to the next.

This repository holds synthesizable SystemVerilog for that architecture and
self-checking testbenches for every unit and for the whole chip.

## Block map

```
 host ──instr──► dart_decoder ──► sequencer (in dart_top)
                  queue, in-order issue,           │
                  stall on a busy SRAM path        │
    ┌──────────────────────────────────────────────┼────────────────────────┐
    │ Matrix Machine (dart_matrix_machine)         │                        │
    │  Buf(X) ◄─ MX quantizer ◄─ Vector SRAM rows  │                        │
    │  Buf(W) ◄─ Matrix SRAM rows (plain or transposed fill)                │
    │  MLEN/BLEN systolic sub-arrays (BLEN x BLEN MX PEs) ─► adder tree ─►  │
    │  Buf(Y) ─► BF16 rows ─► Vector SRAM                                   │
    ├───────────────────────────────────────────────────────────────────────┤
    │ Vector Machine: elementwise unit (+ - x, x*scalar, exp(z-m)),         │
    │  vector buffer, reduction unit (max+index / sum, chained over chunks),│
    │  top-k mask unit, BAOS unit ─► MX quantizer ─► Matrix SRAM,           │
    │  MX dequantizer (Matrix SRAM ─► Vector SRAM)                          │
    ├───────────────────────────────────────────────────────────────────────┤
    │ Scalar Machine: Int unit + gp[32], FP unit (+ - x / exp 1/x sqrt)     │
    │  + fp[32]                                                             │
    ├───────────────────────────────────────────────────────────────────────┤
    │ Vector SRAM (BF16)  Matrix SRAM (MX)  FP SRAM  Int SRAM ─► token FIFO │
    │ prefetch engine (Vector path)  prefetch engine (Matrix path)          │
    └───────┬───────────────────────────────┬───────────────────────────────┘
         HBM port V (read/write)        HBM port M (read)       tokens ─► host
```

The host and the HBM stacks sit outside the chip. `dart_top` brings out their
signals as ports:

* a 64-bit instruction valid/ready port;
* two HBM beat ports, one per SRAM path;
* a 32-bit token valid/ready port.

## The MX datapath of the Matrix Machine

Activations are held in BF16. When a row enters Buf(X), it is quantized on
the fly (`dart_mx_quantizer`):

* Each block of 32 elements gets a shared power-of-two scale, equal to the
  block's largest exponent minus 6.
* Each element becomes an 8-bit integer.

Weights and keys arrive already in MX: 8-bit elements plus one signed 8-bit
scale per 32 elements. An MXINT4 weight is held sign-extended in the 8-bit
container.

A PE (`dart_pe`) does the following:

* It multiplies the two integer elements.
* It shifts the product arithmetically by `scale_a + scale_b + ACC_FRAC`.
* It adds the result into a 32-bit accumulator.
* It passes both operands on to its neighbours.

The accumulator is fixed point with `ACC_FRAC` = 16 fraction bits, so
products from different blocks line up without any floating-point alignment.
The shift saturates rather than wraps.

A sub-array (`dart_systolic_array`) is BLEN x BLEN and output-stationary.
Activation row i enters from the left and weight column j enters from the
top, each delayed by i (or j) cycles. PE (i, j) therefore sees matching
k-steps.

`dart_matrix_unit` places MLEN/BLEN sub-arrays side by side along K. In one
cycle, sub-array s receives k-step `s*BLEN + t` of an MLEN-wide slice, so a
slice of K = MLEN passes in BLEN cycles. M_SUM works like this:

* It waits for the arrays to drain, which takes 2·BLEN−1 cycles after the
  last input.
* The adder tree adds the sub-array tiles.
* The INT32 sums are cast to BF16 with round-to-nearest.
* The result leaves as BLEN rows, one per cycle, into the Vector SRAM.

`dart_matrix_machine` adds the two operand buffers:

* **Buf(X)** holds BLEN rows of MLEN quantized activations.
* **Buf(W)** holds an MLEN x BLEN weight tile. It fills in one of two ways:
  * M_MM reads MLEN Matrix SRAM rows, one per k-step. Each row gives the BLEN
    columns that start at a chosen column offset.
  * M_TMM reads BLEN rows transposed, one per output column. This is how
    Q·Kᵀ uses keys stored one token per row.

## The sampling stage in hardware

For each position of a block, the logits are streamed chunk by chunk, VLEN
values at a time. The operations are these:

| step | instruction | unit | what it does |
|---|---|---|---|
| 1 | `H_PREFETCH_V` | Vector-path prefetch engine | one logit chunk from HBM into a Vector SRAM row, in the background |
| 2 | `V_RED_MAX_IDX` | reduction unit | max and argmax of the chunk. With `imm[0]` set it continues the running max of earlier chunks, so the whole vocabulary becomes one max/argmax |
| 3 | `V_EXP_V` | elementwise unit | exp(z − m) in place, with the max broadcast from an fp register |
| 4 | `V_RED_SUM` | reduction unit | sum, chained across chunks the same way |
| 5 | `S_RECIP` | FP unit | confidence = exp(m − m) / Σ = 1/Σ |
| 6 | `S_ST_FP`, `S_ST_INT` | scalar ports | the confidence goes to FP SRAM and the argmax token to Int SRAM |

Then, once per block:

| instruction | what it does |
|---|---|
| `S_MAP_V_FP` | Copies the L confidences into one Vector SRAM row. |
| `V_EQ_INT` | Marks the positions whose current token equals the mask token. |
| `V_TOPK_MASK` | Streams the L confidences through `dart_topk_mask`, one per cycle. The unit keeps a list of KMAX sorted slots. Each newcomer is compared with every slot at once and inserted, and the list below it shifts. Area is O(k) and the time is L cycles. Only masked positions compete. The resulting L-bit transfer mask is written into Int SRAM. |
| `V_SELECT_INT` | x = mask ? argmax : x, one element per cycle (torch.where). |
| `S_OUT_TOK` | Streams the updated sequence through the token FIFO to the host, honouring back-pressure. |

The Int SRAM holds 2·B·L entries: the sequences plus one working copy. The
FP SRAM holds max(L, VLEN) entries. Neither grows with the vocabulary: only
the chunk in the Vector SRAM does.

## BAOS: smoothing the KV cache before quantization

At the warm step of a generation block, `B_CALIB` streams the freshly computed
keys of a head (D channels per row) into `dart_baos`. The unit tracks, per
channel, the minimum, the maximum and the sum. It then forms:

* the centre c: the mean, or (min+max)/2 in min-max mode;
* the factor f = max(max − c, c − min);
* f^α, with α in Q1.8 (the paper uses 1.0, 0.9 and 0.6);
* 1/f.

A zero factor becomes 1. Four slot sets are kept, one per head of the
HLEN = MLEN/D heads processed together. After calibration:

* `B_NORM_K` writes (K − c)/f through an MX quantizer into a Matrix SRAM row.
  This is the quantized cache line.
* `B_SCALE_Q` multiplies a query by f.

The product Q_s·K_sᵀ then needs no un-scaling of the cache. The centre term
is a per-query constant along the keys, so softmax removes it.

`M_DEQ_V` turns an MX row back into BF16 in the Vector SRAM (`dart_mx_dequantizer`).

## Instruction set and timing

Every instruction is 64 bits wide:

| bits | field |
|---|---|
| 63:56 | op |
| 55:51 | rd |
| 50:46 | rs1 |
| 45:41 | rs2 |
| 40:0 | imm |

Operands name gp/fp registers. SRAM rows and addresses come from gp
registers. The full list, with operand meanings, is the `opcode_e` enum in
`rtl/dart_pkg.sv`.

The decoder issues in order. Scalar register instructions, `S_ST_FP` and
`S_ST_INT` finish in their issue cycle. Everything else runs in the
sequencer of `dart_top`, one instruction at a time.

A prefetch or store only hands its command to the engine of its SRAM path
(one cycle) and then runs in the background. A later instruction waits
(stall on dependency) only if it touches the SRAM of a path whose engine is
still busy. Scalar work, Int/FP SRAM work and transfers on the other path
overlap with it.

Cycle counts from issue to the last write:

| operation | cycles |
|---|---|
| M_MM | (BLEN+1) + (MLEN+1) + 1 + BLEN (fill Buf(X), fill Buf(W), start, stream) |
| M_TMM | (BLEN+1) + (BLEN+1) + 1 + BLEN |
| M_SUM | drain (2·BLEN−1 after streaming) + 1 + BLEN |
| V_ADD/SUB/MUL_VV | 5 (two reads, 2-cycle unit, write) |
| V_MUL_VF, V_EXP_V | 4 |
| V_RED_* | 2 + log2(VLEN) + 1: 6 at VLEN=8, 14 at 2048 |
| V_TOPK_MASK | L + 4, plus L + 1 for writing the mask |
| V_SELECT_INT, V_EQ_INT | n + 2 |
| S_OUT_TOK | n + 2, or longer if the host back-pressures |

The reduction unit alone takes log2(VLEN)+1 cycles, which is 4 at VLEN=8, and
the top-k unit alone takes exactly L cycles.

The HBM ports move BEAT_W = 512-bit beats, lowest beat first:

* A Vector SRAM row is VLEN BF16 lanes (lane i at bits 16i), so 64 beats.
* A Matrix SRAM row is MLEN 8-bit elements followed by MLEN/32 scales, so
  4224 bits or 9 beats.

Reads are answered in order.

## Parameters

The defaults are the main configuration:

| parameter | default | meaning |
|---|---|---|
| BLEN | 64 | sub-array side |
| MLEN | 512 | K slice per cycle (8 sub-arrays, 32768 PEs) |
| VLEN | 2048 | vector lanes |
| D | 128 | head dimension |
| BLK | 32 | MX block |
| VS_DEPTH | 128 | Vector SRAM rows (2·BLEN) |
| MS_DEPTH | 1024 | Matrix SRAM rows (2·MLEN) |
| FP_ENTRIES | 2048 | FP SRAM entries |
| INT_ENTRIES | 1024 | Int SRAM entries (2·16·32) |
| LMAX / KMAX | 64 / 32 | top-k unit |
| BEAT_W | 512 | HBM beat width |

## Where this RTL departs from the paper or fills gaps

Numbers and behaviour taken from the paper:

* BLEN/MLEN/VLEN and the sub-array tiling along K.
* The PE datapath: shift by scale_a + scale_b and INT32 accumulation.
* Dynamic MX quantization of activations at the array boundary.
* The memory domains and their sizes (3BL + V_chunk, max(L, VLEN), 2BL).
* The sampling instruction flow.
* The O(k) streaming top-k, which takes L cycles.
* The BAOS formulas.
* Prefetch engines on both SRAMs.
* In-order issue with stall on dependency.

This design's own choices:

* **Instruction encoding and lane conventions.** The paper names
  instructions but gives no encoding. These opcodes are additions:
  `H_PREFETCH_M`, `H_STORE_V`, `M_TMM`, `M_DEQ_V`, `V_EQ_INT`, `S_OUT_TOK`,
  `S_LD_*` and `B_*`.
* **Matrix Unit size.** One row of MLEN/BLEN sub-arrays is built, 32768 PEs
  at the defaults. The paper also says it "replicates this structure as a
  grid" without a count, and quotes its area at 4096 PEs. A larger grid would
  replicate `dart_matrix_machine`.
* **Memory depths.** The Vector SRAM holds two BLEN-row activation tiles
  (128 rows). That is more than the sampling stage needs (3BL + V_chunk), but
  a GEMM tile needs BLEN rows. The Matrix SRAM holds two MLEN-row tiles. The
  paper gives no capacity for either.
* **Cycle counts that differ from the paper's table** (at VLEN=8): element
  ops take 4–5 cycles end to end against 7; `V_RED_SUM` takes 6 against 20
  (the same tree as the max); a GEMM tile streams in BLEN cycles plus fill
  and drain. `V_RED_MAX` (4 in the unit) and `V_TOPK_MASK` (L) match.
* **Arithmetic.** BF16 arithmetic flushes subnormals and rounds to nearest.
  The special functions are computed in fixed point (`dart_pkg`):
  * e^x as 2^(x·log2 e), with a cubic polynomial for the fractional power;
  * 1/x as an integer division of the mantissa;
  * √x as an integer square root;
  * x^α as 2^(α·log2 x), with a one-term correction for log2.

  The testbenches compare them with exact values at a tolerance of a few
  percent.
* **Dependency rule.** The rule is per SRAM path, not per address.
* **Not built.** The forward Hadamard rotation named in the architecture
  figure is not built: its size, placement and instruction are not
  described, and BAOS is the KV path the design actually uses. The host, the
  HBM stacks and their PHY are outside the design.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. Build and run one with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dart_top \
  -y rtl -y tb +libext+.sv rtl/dart_pkg.sv tb/dart_tb_pkg.sv tb/tb_dart_top.sv
./obj_dir/Vtb_dart_top
```

* **Unit testbenches** (`tb/tb_dart_<unit>.sv`) drive random stimulus and
  compare against references computed in real arithmetic
  (`tb/dart_tb_pkg.sv`). Where the unit has a stated latency, they check the
  cycle counts too.
* **`tb_dart_top`** runs the whole chip at reduced sizes (BLEN 4, MLEN 16,
  VLEN 32, D 8). It covers:
  * the complete sampling flow for two sequences over a two-chunk vocabulary;
  * a GEMM tile with plain and transposed weights, accumulation and M_SUM;
  * elementwise operations;
  * the BAOS calibrate / normalise / dequantize / scale path.

  HBM answers with random stalls and the host applies random back-pressure.
  The testbench counts every mechanism and fails if one never happens: stall
  on dependency, issue during a prefetch, chunk-chained reduction, top-k,
  select, transposed load, token back-pressure, full instruction queue and
  the others.
* **`tb_dart_top_full`** runs the chip with every parameter at its default. It
  takes one 64 x 512 x 64 GEMM tile and one 32-position sampling block, and
  checks the output rows and all committed tokens. Building it takes about
  20 minutes, because the model has 32768 PEs. The GEMM check accepts the
  rounding error of the activation quantizer: half an MX step per element,
  weighted by the weight.

`tb/hbm_model.sv` is the behavioural HBM used by the testbenches.
