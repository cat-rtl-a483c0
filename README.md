# An int8 Transformer encoder-layer engine in the CAT style

This RTL computes one Transformer encoder layer:

```
Tmp = LN(X + Proj(MultiHeadAttention(X)))
Res = LN(Tmp + GELU(Tmp · W1) · W2)
```

It does so for a batch of int8 sequences, using a fixed set of matrix-multiply
engines and a pair of schedulers. It follows the *Encoder/Decoder Processing
Unit* (EDPU) of "CAT: Customized Transformer Accelerator Framework on Versal
ACAP".

That framework has one main idea. The AIE array of a Versal device (a grid of VLIW vector-processor tiles)
is cut into a small number of **matrix-multiply processing units (PUs)** of
fixed shape. Each PU is wrapped with its programmable-logic feeder and drainer
into a **parallel region (PRG)**: the smallest unit that is scheduled. A
Transformer layer is then mapped onto PRGs. The PRG count, the PU sizes and the
parallel mode are chosen per model, offline.

This code takes the BERT-Base configuration of that framework and writes all of
it as synthesizable SystemVerilog. The AIE kernels are included, modelled as
MAC arrays. At its default parameters it holds 352 kernels and runs a BERT-Base
layer (sequence length 256, width 768, 12 heads, FFN width 3072) bit-exactly
against a scalar reference model.

It is a functional and structural model of the architecture, not a port of the
Versal implementation:

- The AIE's VLIW vector code, the PLIO packet switching and the HLS streams are
  replaced by plain RTL with simple handshakes.
- All intermediate tensors pass through one DRAM port.

Where it departs from the paper, this README says so (see "Departures from the
paper").

## 1. The datapath at a glance

```
                         cfg, start ──► cat_edpu ──► busy, cycle counters
                                          │
          ┌──────────── MHA controller ───┼─── FFN controller ────────────┐
          │  (jobs muxed by the current stage: MHA first, then FFN)       │
          ▼                                                                ▼
   LB0  LB1  LB2  LB3         ATB0  ATB1  ATB2  ATB3          Layernorm & Add
   (mm_prg, Large PU 4x4x4    (atb_unit: Q·Kᵀ PRG 2x1x4,      (layernorm_add)
    = 64 kernels each)         softmax, P·V PRG 2x4x2)
          │                           │                             │
          └─────────────── mem_arbiter (round robin, 17 ports) ──────┘
                                          │
                                     DRAM port  (one MS-byte "vec" per cycle)
```

The two stages share the four linear blocks (LBs):

- **MHA stage:** LB0, LB1 and LB2 are the Q, K and V projections and LB3 is
  the output projection. The attention blocks (ATBs) run the heads.
- **FFN stage:** LB0+LB1 form FFN1, with GELU in their receivers. LB2+LB3 form
  FFN2.

The ATB kernels (4 × 24 = 96) are used only in the MHA stage. That is why the
FFN stage can keep at most 256 of the 352 kernels busy.

Kernel count: 4 × 64 (linear blocks) + 4 × (8 + 16) (attention blocks) = 352.

## 2. Data representation

- **vec:** every memory, buffer and port moves `MS` int8 elements at a time
  (`MS` = MMSZ, the kernel edge, 64 by default). Addresses count vecs.
- **Matrices** are row-major and described by `{base, ld}` (`cat_pkg::mat_desc_t`).
  `ld` is the number of vecs per row, so column slices of a wider matrix (one
  head of Q, one tile of H) need no copying.
- **Activations** are int8 in Q4 (real value = x/16). Products accumulate in
  int32.
- **`requant(acc, sh)`** takes each accumulator back to int8: arithmetic shift
  right by `sh`, rounding half up, then saturation. Every GEMM job carries its
  own shift.
- **Attention probabilities** are Q7 (0..127). The P·V shift accounts for
  this.

The paper only says the models are quantised to Int8. The formats and the
shifts above are this design's choices. The testbenches use
`qkv = proj = ffn1 = 4 + log2(E)/2 − 2`, `scores = 6`, `pv = 7` and
`ffn2 = 4 + log2(Dff)/2 − 2`.

## 3. Kernels and processing units

`aie_mm_core` stands for one AIE kernel. It has three windows:

- `A` and `B`: MS × MS int8 each.
- `C`: MS × MS int32.

A `start` computes `C = (acc_clear ? 0 : C) + A·B`. The model takes one A
element times one B row per cycle, so a product takes exactly **MS² cycles**
(4096 at MS = 64). The testbenches check this number.

`aie_mm_pu` arranges `MB × KB × NB` kernels as in the paper's Fig. 4:

- Kernel (mb, kb, nb) multiplies A block (mb, kb) by B block (kb, nb).
- A blocks are broadcast along N; B blocks along M.
- The KB partial products of an output block are summed along the K
  "cascade". Here the sum is combinational, when a C row is read.

| PU       | MB×KB×NB | kernels | one iteration computes |
|----------|----------|---------|------------------------|
| Large    | 4×4×4    | 64      | 256×256×256            |
| Standard | 2×4×2    | 16      | 128×256×128            |
| Small    | 1×1×4    | 4       | 64×64×256              |

## 4. The parallel region (`mm_prg`)

A PRG runs a GEMM job `C = post(requant(A·B))` with `A [m×k]` and `B [k×n]`.
It walks the output in tiles of `(MB·MS) × (NB·MS)`. For each tile it loops
over `k` in steps of `KB·MS`:

1. **Send:** `mm_sender` reads the A blocks and then the B blocks of this step,
   one row per request, and writes them into the kernel windows.
2. **Compute:** the PU runs for MS² cycles. `acc_clear` is set on the first k
   step.
3. **Receive:** after the last k step, `mm_receiver` reads every valid output
   row. It requantises the row, applies GELU if the job asks for it, and writes
   it out.

Partial tiles at the M and N edges are handled by `mb_valid`/`nb_valid`:

- Blocks outside the matrix are neither loaded nor written.
- k must be a multiple of `KB·MS`.

A job only does output column tiles `n_first, n_first + n_step, …`. This is
how two or four PRGs split one GEMM. FFN1 and FFN2 each run on two LBs
(`n_step = 2`), and in hybrid mode one projection runs on all four LBs
(`n_step = 4`).

**Timing.** Send, compute and receive follow one another inside a PRG. The
paper measures 1.41× from overlapping them; this design does not double-buffer
the kernel windows, so the sequence is strictly serial. At MS = 64 a Large PU
iteration costs:

- 4096 compute cycles;
- at least 2048 cycles to move its 32 A and B blocks of 64 rows;
- more when other units contend for the DRAM port.

## 5. The attention block (`atb_unit`)

One job is one head. Q_h, K_h, V_h and O_h are `L × dh` column slices of the
`L × E` matrices in DRAM.

1. **S = requant(Q_h · K_hᵀ)** runs on the pre-stage PRG, a 2×1×4 kernel
   group (8 kernels).
   - Its B operand comes from `tile_transpose`. This unit caches one MS×MS tile
     of K, reading MS rows on a miss, and answers "row r, column-vec c of Kᵀ"
     from it.
   - S goes into the on-chip Attn Buffer (`vec_ram`, L×L bytes).
2. **P = softmax(S)** runs in place on the Attn Buffer (`softmax_unit`):
   - pass 1 finds the row maximum m;
   - pass 2 sums `e_j = 2^(−t_j)` with `t_j = (m − s_j)·log2(e)` in Q4, using
     a linear fit of `2^(−frac)`, then forms `recip = 2³¹ / Σe`;
   - pass 3 writes `p_j = round(e_j · recip · 127 / 2³¹)`.
3. **O_h = requant(P · V_h)** runs on the post-stage PRG, a Standard 2×4×2
   group (16 kernels). A comes from the Attn Buffer, B = V_h from DRAM, and C
   is written into the head's column slice of the merged O.

A 4-port arbiter inside the block merges its own DRAM traffic: Q reads, K
reads through the transpose, V reads and O writes. The block requires
`dh = MS` and `L` a multiple of `2·MS`.

## 6. Scheduling: the two controllers

Both controllers run a lock-step loop: issue the jobs of a step, wait until
every unit is idle, move to the next step. `cfg.pm_mha` and `cfg.pm_ffn` pick
the mode per stage. The paper picks the mode offline from the model size (its
Factor1/Factor2 test); here it is a configuration bit.

### MHA stage (`mha_controller`), for each batch b

**Pipelined mode.** The Q, K and V outputs are cut into slices of `P_ATB·dh`
columns. At BERT-Base sizes that is 4 × 64 = 256 columns: exactly one Large-PU
column tile, or four heads.

```
step 0:  LB0/1/2 compute Q,K,V slice 0
step 1:  LB0/1/2 compute slice 1     ATB0..3 run heads 0..3   (slice 0)
step 2:  LB0/1/2 compute slice 2     ATB0..3 run heads 4..7
step 3:                              ATB0..3 run heads 8..11
then:    LB3 computes P = O·Wo  →  Layernorm & Add: Tmp_b = LN(P + X_b)
```

So the linear blocks and the attention blocks work at the same time on
different heads. This is the paper's reason for pulling the per-head Q/K/V
projections out of the attention blocks.

**Hybrid mode.** Q, K and V are each computed on all four LBs, one after the
other. The head groups then run on the ATBs, four heads at a time. Proj runs on
all four LBs, and Layernorm & Add closes the batch.

### FFN stage (`ffn_controller`)

**Pipelined mode.** In step s, FFN1 of batch s (LB0+LB1, GELU on) runs while
FFN2 of batch s−1 (LB2+LB3) runs. Layernorm & Add then closes batch s−1
(`Res = LN(F + Tmp)`). H is double-buffered by batch parity, so FFN1 of batch
s+1 never overwrites what FFN2 of batch s−1 still reads. With one batch the two
halves cannot overlap, and FFN1 and FFN2 run one after the other.

**Hybrid mode.** For each batch, FFN1 runs on all four LBs, then FFN2 on all
four, then Layernorm & Add.

## 7. Layernorm & Add and GELU

**`layernorm_add`** computes `Y = LN(A + R)` one row at a time:

- Pass 1 reads A and R, keeps `z = a + r` (int16) on chip, and sums `S = Σz`
  and `Q = Σz²`.
- With n columns, it forms `V = n·Q − S²`.
- A 32-step bit-serial integer square root gives `sd = ⌊√V⌋`, and
  `inv = 2³² / sd`.
- Pass 2 writes `y = sat((z·n − S)·16·inv / 2³²)`. That is `(z − mean)/σ` in
  Q4, because `(z·n − S)/√V = (z − mean)/σ`.

There are no learned gain and bias.

**`gelu_unit`** (in the FFN1 receivers) evaluates
`GELU(x) = x·(1 + erf(x/√2))/2` with an integer second-order fit of erf, in the
style of I-BERT's i-GELU. Over all 256 int8 inputs it is within 2 LSB of the
exact function.

## 8. Top-level interface and memory map

`cat_edpu` (parameters: `MS` = 64, `P_ATB` = 4, `LMAX` = 256, `EMAX` = 768)
has these ports:

- **Host side:** `start`, `cfg` and `busy`. `cfg` is a `cat_pkg::edpu_cfg_t`
  that holds:
  - the DRAM base (vec address) of X, Wq, Wk, Wv, Wo, W1, W2, of the scratch
    tensors Q, K, V, O, P, H (two L×Dff buffers) and F, and of Tmp and Res
    (per-batch arrays);
  - the sizes L, E, heads, Dff and batch;
  - the six requantisation shifts;
  - the two parallel-mode bits.
- **DRAM port:** `dram_valid/we/addr/wdata`, with `dram_ready`. Read data
  returns in order on `dram_rvalid/dram_rdata`, any number of cycles later. The
  top issues one request per cycle at most.
- **Counters and status:**
  - `mha_cycles` and `ffn_cycles`;
  - `kernel_cycles`, the sum over cycles of the kernels computing in that
    cycle. `kernel_cycles / (cycles × 352)` is the effective utilisation of the
    paper's Eq. 2.
  - `lb_active`, `atb_active`, `ln_active` and `ffn_stage`.

Weights are stored as `W [in × out]` row-major, so every projection is
`X · W`.

The host writes weights and inputs into DRAM, sets `cfg` and pulses `start`.
When `busy` falls, `Res` holds the layer output for every batch. A 12-layer
model is 12 calls.

Limits at the default parameters:

- `L ≤ 256`, and `L` a multiple of 128;
- `E ≤ 768`;
- `dh = 64`;
- `P_ATB·dh = 256`;
- E and Dff multiples of 256.

## 9. Departures from the paper

- **Attention-block PUs.** The text gives each ATB two Small PUs for Q·Kᵀ and
  two Standard PUs for P·V. That would be 40 kernels per ATB and 416 in all,
  more than the 400 of the device. The resource table and the text both say
  352 kernels, 96 of them in the ATBs. This design follows the count: 8 + 16 =
  24 kernels per ATB.
- **No overlap inside a PRG.** Send, compute and receive are serial (the
  paper's 1.1× baseline, not its 0.71× pipelined organisation). The kernel
  windows are single-buffered.
- **DRAM instead of streams.** The paper sends Q/K/V slices to the attention
  blocks over on-chip streams and keeps several buffers on chip (7.56 MB for
  BERT-Base). Here every intermediate tensor (Q, K, V, O, P, H, F, Tmp) goes
  through DRAM over a single arbitrated port. Only the Attn Buffer (64 KB per
  ATB) and the Layernorm row are on chip. The paper's own statement that DRAM
  is "the data exchange centre" supports this, but it makes the design
  memory-bound (see section 10).
- **Kernels are RTL MAC arrays.** Neither the AIE instruction set nor the PLIO
  packet switching is modelled.
- **Nonlinear operators.** The arithmetic of softmax, GELU and layer norm is
  not given by the paper and is this design's own. Layer norm has no affine
  part.
- **ViT lengths.** There is no sequence mask. L must be a multiple of 128, so
  ViT-Base (L = 197) would need zero padding and a key mask in the softmax,
  which is not built.
- **Not built at all:** the host, PCIe/XRT, the DRAM device, and scheduling
  across several EDPUs.

## 10. Verification and measured behaviour

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a cycle watchdog. Reference values come
from `tb/cat_ref_pkg.sv`, a scalar model written element by element
(`matmul`, `softmax_row`, `gelu`, `ln_add` and a whole `layer`).

| testbench | what it checks |
|---|---|
| `tb_aie_mm_core`, `tb_aie_mm_pu` | products, accumulation, cascade sums; MS² cycles per iteration |
| `tb_mm_sender`, `tb_mm_receiver` | window contents, partial tiles, requantisation/GELU, random back-pressure |
| `tb_mm_prg` | a 12×16×20 GEMM with edge tiles, `n_first`/`n_step` splitting, GELU; PU-active cycles |
| `tb_softmax_unit`, `tb_gelu_unit`, `tb_layernorm_add` | operators against the reference (GELU over all 256 inputs) |
| `tb_tile_transpose`, `tb_vec_ram`, `tb_mem_arbiter` | transposed reads and miss cost; RAM latency; response routing under contention |
| `tb_atb_unit` | two heads of attention, untouched neighbour columns, PU time |
| `tb_mha_controller`, `tb_ffn_controller` | dependency scoreboards with random-latency unit stubs, in both modes |
| `tb_cat_edpu` | whole layer at MS = 4 (L 16, E 64, 16 heads, Dff 128, 2 batches), both modes |
| `tb_cat_edpu_full` | whole BERT-Base layer at the default parameters |

`tb_cat_edpu` compares all 4096 output bytes in each mode. It also counts the
mechanisms the design is built around and fails if one never happens:

- QKV and ATB running at once;
- FFN1 and FFN2 running at once;
- four LBs on one GEMM;
- DRAM back-pressure;
- several units contending for the port;
- GELU;
- Layernorm & Add.

`tb_cat_edpu_full` instantiates `cat_edpu` with no parameter overrides. It runs
one BERT-Base layer (L 256, E 768, 12 heads, Dff 3072, one batch, pipelined
mode) and compares all 196,608 output bytes: they all match. Verilator needs
about 3.5 minutes to build it and 2 minutes to run it. It reports:

```
649,986 cycles  (MHA 253,272, FFN 396,714), average busy kernels 47 of 352
```

So the layer is correct, but the kernels are busy only about 13 % of the time.
The serial PRGs and the single DRAM port (one 64-byte vec per cycle) starve
them. The paper's 87 % relies on pipelined PRGs and on-chip streaming. These are
the two features to add first if speed matters (section 9). For scale: at
300 MHz the layer would take about 2.2 ms.

Each module also has a broken copy that its testbench is known to reject. That
is how the tests were checked to be able to fail.

### Running a test

Every testbench is self-contained. The include paths let Verilator find each
module by its file name. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cat_pkg.sv tb/cat_ref_pkg.sv tb/tb_cat_edpu.sv --top-module tb_cat_edpu
./obj_dir/Vtb_cat_edpu
```

`tb/edpu_env.sv` holds the layer-level environment: the DRAM model, data,
reference and mechanism counters. It is parameterised, so another model size
is a new three-line wrapper like `tb_cat_edpu_full.sv`.

## 11. Changing the design

- **Kernel size:** `MS` everywhere. Sizes must stay multiples of the tile
  edges listed in section 8.
- **PU shapes:** `MB/KB/NB` of `mm_prg` (the LBs in `cat_edpu`), and
  `MB1/KB1/NB1` and `MB2/KB2/NB2` of `atb_unit`.
- **Number of attention blocks:** `P_ATB`. The MHA pipeline slices `P_ATB`
  heads per Large-PU column tile.
- **Longest sequence and row:** `LMAX` (Attn Buffer size) and `EMAX`
  (Layernorm row buffer).
- **Kernel-count constants:** these feed `kernel_cycles` and are
  `K_LARGE/K_PRE/K_POST` in `cat_edpu`. Keep them in step with the PU shapes.

The files, bottom-up:

- `cat_pkg`
- `aie_mm_core`, `aie_mm_pu`
- `mm_sender`, `mm_receiver`, `gelu_unit`
- `mm_prg`
- `vec_ram`, `tile_transpose`, `softmax_unit`, `mem_arbiter`
- `atb_unit`, `layernorm_add`
- `mha_controller`, `ffn_controller`
- `cat_edpu`

Each file opens with a description of its function, its interface and its
timing.
