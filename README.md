# COBRA binary transformer accelerator: RTL

This is a synthesizable SystemVerilog model of COBRA, the binary-transformer
accelerator described in "COBRA: Algorithm-Architecture Co-optimized Binary
Transformer Accelerator for Edge Inference". In a binary transformer, the
activations and weights of every large matrix product are one bit wide.
The products then reduce to bitwise logic plus a population count. COBRA uses
one engine for every matrix product of an encoder layer: Q/K/V, attention
scores, context, attention output, and both FFN layers. The engine fuses the
quantisation that follows each product into the product itself, so what comes
out is either the next binary operand or an integer for LayerNorm. Softmax is
replaced by the *Shifted Polarized Softmax* (SPS): a per-head threshold on the
raw score that gives a 0/1 attention matrix directly.

The RTL runs a full encoder layer, from input activations in DRAM to output
activations in DRAM. Its defaults are BERT-base with a 32-PE engine (the
paper's ZCU102 configuration):

| parameter | default | meaning |
|---|---|---|
| `L` | 512 | sequence length *l* |
| `D` | 768 | hidden size *d* |
| `H` | 12 | heads *h* (head size *d_h* = 64) |
| `R` | 4 | FFN size = R·d = 3072, processed in R chunks |
| `NPE` | 32 | RBMM processing elements |
| `BO` | 13 | engine output width, max(log2 FF + 1, h) |

## 1. Arithmetic: real-binary vector multiplication (RBVM)

Binary values are stored as bits. A bit means +1/−1 for signed operands and
1/0 for unsigned operands (the ReLU output and the SPS output). For N-bit
datapacks *a* and *b*:

* (±1)·(±1): `a·b = 2·popcount(XNOR(a,b)) − N`
* (0/1)·(±1): `a·b = 2·popcount(AND(a,b)) − N + δ`, where δ is the
  number of zeros in *a*. This is the "don't care" (DC) count.

The −N term is never computed on its own. Each head PE subtracts a
*threshold / data width* value, chosen per mode, from `2·popcount`. The δ
term is a *DC INPUT* added after the heads are summed.

The DC counts are produced by the RBMM run that creates the unsigned matrix:

* **M2 → M3:** while the SPS matrix is computed, each head PE counts its zero
  outputs (**DC HEAD**). Those counts become the DC INPUT of the M3 context
  product.
* **F1 → F2:** the first FFN layer counts zero ReLU outputs per row
  (**DC FULL**). Those counts become the DC INPUT of the second FFN layer.

No extra pass over the data is needed.

## 2. The RBMM engine

```
 A row datapack (D bits) ─┐
 B column datapacks ──────┤  S0 registers
 (NPE x D bits)           │
                          ▼
   ┌──────────── RBMM PE x NPE (lock step) ────────────┐
   │  HEAD PE x H     (S1)                              │
   │    XNOR | AND -> popcount -> 2*pop - thr           │
   │    -> SPS bit (M2, masked) / DC HEAD counter       │
   │  ACC PATH: sum of heads + DC INPUT    (S2)         │
   │  CONCAT PATH: H SPS bits side by side (S2)         │
   │  >= bias, mode mux, F2 += previous, DC FULL (S3)   │
   └────────────────────────────────────────────────────┘
```

* Each invocation takes one row datapack of A and NPE column datapacks of B.
  It returns NPE results four cycles later (`rbmm_engine`).
* Invocations can be issued every cycle (II = 1).
* A tag (head, row, column group) and first/last-of-row flags travel with each
  invocation, so the write-back side knows where every result goes.

**Popcount.** The popcount is built as the paper describes (`popcount_unit`,
`compressor63`). The datapack is split into 36-bit groups. In each group:

1. Six 6:3 compressors count six bits each. Each compressor is a 64 × 3-bit
   ROM, generated at elaboration.
2. A second row of three compressors takes the bit planes of those six counts:
   one compressor for the twos bits, one for the ones bits, one for the fours
   bits.
3. A shift-and-add combines the three plane counts.

A 64-bit head needs two groups. The group counts are then summed.

**Output format.**

* Binary results are `sum >= bias` as 0/1.
* Integer results use all `BO` bits.
* In M2 the output is the H-bit concatenation of the heads' SPS bits, which is
  why `BO >= H`.

### Modes

| mode | product | A | B | per-head thr | DC INPUT | output |
|---|---|---|---|---|---|---|
| M1 | Q, K, V = X·W (l×d×d) | X rows | W columns | d_h | – | binary, ≥ bias |
| M2 | scores, h × (l×d_h×l) | Q rows | K rows | T_k + d_h | – | H SPS bits, masked; DC HEAD |
| M3 | context, h × (l×l×d_h) | score row of head k (low L bits) | transposed V | l/h (bias + l mod h) | DC HEAD of head k | binary, ≥ bias |
| M4 | attention output (l×d×d) | context rows | W_O columns | d_h | – | integer |
| F1 | FFN I chunk r (l×d×d) | LN1 signs | Y_r columns | d_h | – | binary, ≥ θ (ReLU folded); DC FULL |
| F2 | FFN II chunk r (l×d×d) | F1 output (0/1) | Z_r columns | d_h | DC FULL | integer + previous output |

* **M2 SPS threshold.** SPS sets a score to 1 when
  QKᵀ/√d_h ≥ λ_k, where λ_k is a learned threshold per layer and head. The
  hardware compares the integer dot product with T_k, which stands for
  λ_k·√d_h rounded to an integer. The T_k are the `sps_t` inputs and can be
  changed for every layer start.
* **M2 attention mask.** The mask comes from the loop indices. Lane *p* of
  group *g* works on column *j* = g·NPE + p, and it is masked when:
  * padding mask: *j* ≥ `mask_len`;
  * causal mask: *j* > *i*.

  A masked element gives SPS bit 0.
* **FFN chunking.** The FFN is split into R chunks: E = Σ_r ReLU(X·Y_r)·Z_r.
  Only one l×d hidden matrix is ever held, and F2 adds its result to the
  previous chunk's total in the integer buffer.

## 3. Data movement and on-chip buffers

All buffers are instances of `sdp_ram`: one write port with a bit write mask,
and one read port with a one-cycle registered read. The whole working set stays
on chip, as in the paper's ZCU102 design.

| buffer | organisation | holds |
|---|---|---|
| `abuf` | 4L rows × D bits | A operands: regions X (input / LN1 signs), Q, CTX, H (F1 output) |
| `sbuf` | H banks × L rows × L bits | binary scores of each head |
| `bbuf` | NPE banks × (2·D/NPE + L/NPE) × D bits | weight columns, K rows, transposed V columns |
| `ebuf` | L·D/NPE words × NPE·BO | integer results (M4, F2 accumulation) |
| `rbuf` | L·D/NPE words × NPE·16 | residual / layer values, Q8.8 |
| `bias`, `gamma`, `beta` | D/NPE words × NPE·16 | per-column vectors |
| `dch`, `dcf` | L × H·BO, L × BO | DC HEAD and DC FULL per row |

**`bbuf` banking.** Column (or row) *c* of a B operand lives in bank
*c* mod NPE, at index *c* div NPE within its region. Each region is laid out
as follows:

* **Weight region:** the NPE columns of one invocation sit at one address
  across all banks.
* **K region:** K row *j* goes to bank *j* mod NPE. M2 therefore reads NPE
  consecutive K rows in one cycle.
* **V region:** V is stored transposed. Column *c* of V becomes an L-bit word
  in bank *c* mod NPE, and bit *i* of that word is written when row *i* of V
  is produced. This is how the data packing conversion unit
  (`datapack_conv`) implements the V transpose that M3 needs.

### DRAM layout (AXI4, 128-bit beats)

* **Activations** (`x_addr`, `y_addr`): l·d 16-bit Q8.8 values, row major.
* **Weights** (`w_addr`):
  * Matrix *m* holds D column datapacks of ⌈D/128⌉ beats each. Bit *n* of a
    column is row *n* of the matrix.
  * *m* = 0..3 are W_Q, W_K, W_V, W_O; then *m* = 4+2r is Y_r and
    *m* = 5+2r is Z_r.
  * Z_r is rows r·d to (r+1)·d − 1 of the FF × d matrix Z. Bit *n* of its
    column *p* is Z[r·d + n][p].
* **Vectors** (`p_addr`): vector *v* is D 16-bit values.
  * *v* = 0..3: biases of Q, K, V and the context;
  * 4+r: F1 biases θ = max(0, round(α/2 + β)), ReLU already folded in;
  * 4+R, 5+R: γ₁, β₁;
  * 6+R, 7+R: γ₂, β₂.
* **Alignment:** base addresses must be 4 KiB aligned. Bursts are at most 16
  beats, with one burst outstanding (`axi_dma`).

## 4. One encoder layer

`cobra_ctrl` hands the data path one descriptor at a time. It moves on when the
data path reports `op_done`. The sequence is:

1. **Input:** load X into `rbuf`, then binarise its signs into `abuf.X`.
2. **Q, K, V:** for each of Q, K and V: load W, load the bias, run M1.
   * Q results are packed into `abuf.Q`.
   * K rows go into the K region of `bbuf`.
   * V is transposed into the V region.
3. **Scores:** run M2. SPS bits go into `sbuf`, and DC HEAD counts into `dch`.
4. **Context:** load the context bias, run M3 over all heads into `abuf.CTX`.
5. **Attention output:** load W_O, run M4 into `ebuf`.
6. **LayerNorm 1:** load γ₁ and β₁.
   * LN1 computes LN(X + scale1·E), writes the result back into `rbuf`, and
     writes its signs into `abuf.X`.
7. **FFN:** for each chunk r: load Y_r, load θ_r, run F1 (into `abuf.H`,
   DC FULL into `dcf`); load Z_r, run F2 (accumulating in `ebuf`).
8. **LayerNorm 2:** load γ₂ and β₂, then LN2 computes LN(LN1 + scale2·E).
9. **Output:** store `rbuf` to `y_addr`.

Each RBMM run is driven by `rbmm_rw_ctrl`. It issues one invocation per cycle
over rows × column groups (in M3, heads × rows × groups). The invocation goes
through one buffer-read cycle and the 4-cycle engine. `datapack_conv` then
turns each result into masked writes into the buffer the next run reads.

### LayerNorm in fixed point

`layernorm_unit` works on NPE values per cycle with a local row buffer. Each
row takes three passes:

1. **Residual add and sums:** x = sat16(res + (E·scale >>> 8)). The unit
   accumulates Σx and Σx².
2. **Statistics:**
   * mean = Σx / d, truncated toward zero;
   * var = max(0, Σx²/d − mean²);
   * std = max(1, ⌊√var⌋);
   * inv = ⌊2¹⁶ / std⌋.

   These use a sequential divider (`seq_div`) and a sequential square root
   (`seq_isqrt`).
3. **Normalise:** y = sat16(((((x − mean)·inv) >>> 8)·γ >>> 8) + β).

All values, scales and parameters are 16-bit Q8.8.

## 5. Performance of this implementation

| size | cycles per layer |
|---|---|
| full BERT-base layer (l = 512, d = 768, h = 12, FF = 3072, 32 PEs), padding mask of 400 tokens | 816,307 |

The full-size run uses a testbench DRAM with random stalls. That cycle count is
2.7 ms at the 300 MHz the paper's bitstreams use.

The engine itself needs only 167,936 issue cycles per layer:

* M1: 3 × 12,288
* M2: 8,192
* M3: 12,288
* M4: 12,288
* F1 + F2: 8 × 12,288

The rest of the cycle count comes from two places:

* **LayerNorm:** the unit is bit-serial for its statistics, so each row costs
  about 2·d/NPE + 170 cycles. The paper's unit uses DSP blocks.
* **DRAM transfers:** they are not overlapped with computation.

This design therefore does not reach the paper's reported throughput. Only
the engine keeps the paper's one-invocation-per-cycle rate; the control
around it is simpler.

## 6. Where this RTL departs from the paper, or goes beyond it

The paper gives the engine's structure (HEAD PE, RBMM PE, popcount, modes, DC
mechanism, FFN chunking) and the list of top-level units. Much else is this
design's own choice:

* **Formats and handshakes:** number formats (Q8.8), reset, handshakes and the
  4-stage engine pipeline placement.
* **Memory and transfers:** the buffer organisation, the DRAM layout, and the
  AXI burst policy (16 beats, one outstanding burst).
* **LayerNorm arithmetic:** the order of operations, the rounding, and the
  bit-serial divider and square root.
* **Mask and binarisation:**
  * Only padding and causal masks are built.
  * Binarisation of LayerNorm output is its sign, with sign(0) = +1. A
    per-column shift β_i, as in the paper's binarisation equation, can only
    enter through the biases of the following RBMM.
* **No DRAM spill for intermediates:** the paper's resource-limited variant
  (KV260) keeps intermediate matrices in DRAM. That variant is not built.
  Here everything is on chip; on-chip memory is about 19.1 Mbit after
  synthesis at the defaults.
* **V transpose:** it uses bit-masked writes into the banked B buffer, not the
  paper's LUT-based buffers.
* **Scaling inputs:** SPS thresholds T_k (`sps_t`) and the Q8.8 scales of the
  M4 and F2 outputs (`cfg.scale1/2`) are run-time inputs. How they are trained
  is outside the hardware.
* **Embeddings:** the embedding layer and anything outside one encoder layer
  are not part of the design. A 12-layer model is 12 starts with different
  weight addresses.
* **Size constraints:** the RTL requires D % H = 0, D % NPE = 0,
  (D/H) % NPE = 0, L % NPE = 0, NPE % 8 = 0, L ≤ D and H ≤ BO.

## 7. Files

**`rtl/`**

* `cobra_pkg`: types and defaults.
* Engine parts, from the bottom up: `compressor63`, `popcount_unit`,
  `head_pe`, `rbmm_pe`, `rbmm_engine`.
* Engine control and write-back: `rbmm_rw_ctrl`, `datapack_conv`.
* LayerNorm: `layernorm_unit`, with its helpers `seq_div` and `seq_isqrt`.
* Memory and transfers: `sdp_ram`, `axi_dma`.
* Sequencing and top level: `cobra_ctrl`, `cobra_top`.

Every file opens with a description of its function, interface and timing.

**`tb/`**

* One self-checking testbench per module, `tb_<module>.sv`.
* `cobra_env.sv`: a behavioural AXI DRAM, a random layer generator and an
  independent reference model of the layer.
* `tb_cobra_top`: reduced size (l = 16, d = 32, h = 2, R = 2, 8 PEs), causal
  mask. It checks intermediate buffers as well as the output. It also counts
  each mechanism: every mode, masked SPS elements, DC INPUT use, F2
  accumulation, both LayerNorms, AXI stalls and multi-burst transfers.
* `tb_cobra_full`: the top at its default parameters, with a padding mask. It
  compares all 393,216 output values.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cobra_pkg.sv tb/tb_cobra_top.sv \
          --top-module tb_cobra_top -o sim && ./obj_dir/sim
```

The full-size testbench builds in about 20 s and simulates the layer in about
12 s.
