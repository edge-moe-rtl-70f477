# Edge-MoE: a multi-task ViT accelerator with expert-by-expert MoE

This is synthesizable SystemVerilog for an edge accelerator that runs a
multi-task Vision Transformer with Mixture-of-Experts layers (M3ViT) end to
end: patch embedding, twelve encoder layers of self-attention, and either
a dense MLP or a task-gated MoE in each layer. The design targets a small
FPGA-class budget. Every computation is time-shared on a handful of units
that stream their operands from off-chip memory, so memory traffic and
on-chip buffer size are what shape it.

Five ideas carry the design:

1. **Expert-by-expert MoE with task-level sparsity.** A gating unit picks
   the top-k experts of each token for the current task. It sorts the tokens
   into one queue per expert, and a *metaqueue* lists the experts that got
   at least one token. The sequencer then computes one expert at a time over
   its queue only. Each expert's weights load once per layer, and an expert
   no token chose is never loaded. Switching task only means using a
   different gating matrix.
2. **Attention reordering.** Q x K^T runs with parallelism P while reading
   only one K token per iteration, whatever P is. The M' x V product uses
   the same schedule.
3. **Single-pass softmax.** While the scores of a row are made, a running
   maximum and a rescaled running sum are kept. The M' x V unit turns raw
   scores into probabilities as it reads them, so the score matrix is never
   normalised in a separate pass.
4. **GELU as ReLU minus a small table.** GELU(x) = ReLU(x) − δ(|x|), where δ
   is even and decays fast. A short look-up table over |x| is enough.
5. **One unified linear unit.** A single engine runs every linear layer:
   QKV, projection, MLP, expert FC1 and FC2. It uses a manually flattened
   loop, so sizes can change from run to run. It has dense and
   queue-indexed (sparse) token access, an optional GELU, score-weighted
   accumulation, a wide bias type and a ping-pong weight buffer.

## Number formats

| quantity | format |
|---|---|
| activations, scores, LN outputs | 32-bit signed, 22 fraction bits (10 integer bits) |
| weights, LayerNorm γ/β, gating weights | 16-bit signed, 12 fraction bits, in the low half of a DRAM word |
| attention-layer biases (QKV, projection, patch embedding) | 16-bit, 7 integer + 9 fraction bits |
| MLP and expert biases | 16-bit, 5 integer + 11 fraction bits |
| internal wide bias | 18 bits, 7 integer + 11 fraction bits (both formats widen exactly) |
| accumulators | 64 bits, saturated to 32 bits on output |

`edge_moe_pkg` holds the types, the configuration structs of the units, the
default model sizes and the DRAM layout functions.

## The units

### Top level and sequencing (`edge_moe_top`, `edge_moe_ctrl`)

`edge_moe_top` holds one instance of each unit and brings out 16 DRAM word
ports, one for each unit port; their numbering is listed in the file header.
A port takes a request `{valid, we, addr, wdata}` in the cycle it is
valid. Read data returns one cycle later, and a port never stalls. The
memory system behind the ports is outside the design; the testbenches use
`tb/dram_model.sv`.

`edge_moe_ctrl` is a state machine that runs one computation at a time:

```
patch embed -> X
for each layer l:
  LN1(X) -> XN ; QKV = linear(XN)           (Q|K|V of a token contiguous)
  for each head: QxK (scores, b, s) ; M'V -> ATT[:, head]
  TMP = linear_proj(ATT) ; X = X + TMP
  LN2(X) -> XN
  l even (ViT):  HID = GELU(FC1(XN)) ; TMP = FC2(HID) ; X = X + TMP
  l odd  (MoE):  gating(XN, task) -> expert queues, metaqueue
                 for each expert e in the metaqueue:
                   HID[tok] = GELU(FC1_e(XN[tok]))        tok in queue e
                   X[tok]  += g(tok,e) * FC2_e(HID[tok])  (accumulate in place)
```

Adding the weighted expert outputs straight into X gives
x + Σ g_k E_k(LN(x)), so the MoE layer needs no separate residual add.

The linear unit has two weight banks. Loads run under compute wherever a
bank is free:

* the projection weights load during the QKV layer;
* the FC1 weights load during the projection;
* the FC2 weights load during FC1;
* in MoE layers, expert FC1 always computes from bank 0 and FC2 from
  bank 1. Expert e's FC2 loads while its FC1 runs, and the next expert's FC1
  loads while e's FC2 runs.

The sequencer waits only when a load has not finished. It counts those
cycles (`stats.load_stall`) and the cycles a load ran under compute
(`stats.load_overlap`).

The DRAM layout is fixed by the parameters. In word addresses:

* the image, in HWC order;
* the patch-embedding weights, bias and positional embedding;
* the layers in order. Each layer holds LN1 γ|β, the QKV weights and bias,
  the projection weights and bias, LN2 γ|β, and then either FC1/FC2 or
  `N_TASKS` gating matrices followed by every expert's FC1/FC2;
* the activation buffers X, XN, QKV, S (scores), ST (row statistics), ATT,
  HID and TMP.

Weight matrices are stored row-major as out_dim × in_dim. The `lay_*`
functions in the package and the header of `edge_moe_ctrl` give the exact
offsets. At the default sizes the layout takes about 18.3 M words, so
addresses are 26 bits wide.

### Attention: reordered Q x K with online softmax (`attn_qk_unit`, `online_softmax`, `exp_unit`)

The Q x K unit keeps P query rows in slots and streams one key token per
iteration. Slot s holds query row g·P+s during iterations g·N+s … g·N+s+N−1,
while key K_(t mod N) streams by.

* Every row meets each key exactly once.
* A row that joined late picks up its missed keys when the key stream wraps
  around.
* A slot reloads right after its last product.

A head therefore takes N²/P + P − 1 iterations (67 for N=16, P=4; 4099 for
N=128, P=4). The testbenches check this count. One iteration lasts dh
cycles: key elements stream one per cycle, and a slot that starts a new row
reads its query on a second port in the same cycles.

Each slot feeds its scores to an `online_softmax`. When the score x is
larger than the running bias b, the unit sets s ← s·e^(b−x) + 1 and
b ← x; otherwise it sets s ← s + e^(x−b). The test is strict, and b starts
at the most negative value. When a row has all N scores, its (b, s) pair is
written next to the raw scores. Scores are scaled by 2^−shift, where
shift = log2(dh)/2, which is exactly 1/√64 for dh = 64.

`exp_unit` computes e^x for x ≤ 0 as 2^(x·log2 e). The integer part
becomes a right shift. The fraction comes from two 64-entry tables that are
computed at elaboration, plus a first-order correction. The error is within
a few LSBs.

### Attention: M' x V (`attn_mv_unit`)

This unit uses the same slot schedule, applied to V. In each iteration it
reads the P scores at the current slot positions, and the (b, s) of a row
that is starting. One shared exp unit and one divider turn each score into
exp(x−b)/s. It then streams V_k for dh cycles with P MACs per cycle, into a
cache of P output rows. A finished row is written back during the next
iteration, at `o_base + row·o_stride`, so each head lands in its own
column slice of ATT.

### Unified linear layer (`linear_unit`, `weight_loader`, `weight_bram`)

For each token, the reader copies in_dim inputs into a local buffer. A dense
run takes token t; a sparse run takes the t-th entry of the current expert's
queue, which also supplies the gate score.

The compute loop covers (output block, input index), flattened by hand.
Every cycle, one BRAM word gives the weights of LANES outputs for one input,
and LANES MACs run. When a block of LANES sums is complete, the writer
takes it over. The writer:

* adds the widened bias;
* applies GELU if asked;
* writes one output per cycle, or in accumulate mode reads the old value
  and writes old + score·y.

Meanwhile the next block computes. If the writer is still busy when a block
completes, the pipeline holds for a cycle.

The weight loader reads the row-major weights in DRAM order and writes them
in blocked order, with input i of output o going to word
(o/LANES)·in_dim + i, lane o mod LANES. The bias format is remembered per
bank.

A run takes n_tok·(in_dim + 2 + ⌈out_dim/LANES⌉·in_dim + 2) + LANES + 1
cycles when in_dim ≥ LANES. A load takes out·in + out + 2 cycles.

### GELU (`gelu_approx`)

GELU(x) = ReLU(x) − δ(|x|), with δ(a) = a·Φ(−a). The table has a step of
2^−8 and 1408 entries, reaching |x| = 5.5, where δ < 2^−23. Entries hold 22
fraction bits and are computed at elaboration by a constant function that
sums the erf series. The index is truncated, with no interpolation. The
error is below 2^−9 + 4 LSB.

### Gating and expert queues (`moe_gating_unit`, `expert_queues`)

The gating unit loads the current task's N_EXP × D gating matrix into its
buffer, one expert per lane. For each token it computes all N_EXP logits in
D cycles. It then selects the top-k, with ties going to the lower expert
index. Softmax over the k selected logits gives the gate scores, and the
unit pushes (token, score) into the k expert queues. The queues live on
chip, with one entry per token per expert, so they cannot overflow. An
expert enters the metaqueue when it receives its first token.

### LayerNorm, patch embedding, residual adder

* `layernorm_unit` works on one token at a time. Pass 1 buffers the token
  and sums x and x². A restoring square root (one bit per cycle) and one
  division then give 1/σ, with ε = 2^−20. Pass 2 writes
  (x−μ)·(1/σ)·γ + β. γ and β are loaded into a small BRAM by its own
  loader.
* `patch_embed_unit` loads the D × (PATCH²·CH) weights once. For each
  patch it reads the patch pixels in (row, column, channel) order and
  computes D outputs with LANES MACs. It adds the bias and the positional
  embedding on write.
* `adder_unit` computes out = a + b with saturation, at 3 cycles per
  element over its single port.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/edge_moe_pkg.sv rtl/*.sv \
          tb/dram_model.sv tb/tb_edge_moe_top.sv --top-module tb_edge_moe_top
./obj_dir/Vtb_edge_moe_top
```

For another testbench, swap in its file and top name; `tb_exp_unit` and
`tb_gelu_approx` do not need `dram_model.sv`. The testbenches reset or
initialise every state they use, so they give the same result with random
or zero initial values (`+verilator+rand+reset+2`).

The end-to-end testbenches share `tb/edge_moe_tb_body.svh`. It fills the
DRAM with a random image and random weights, each matrix scaled by
1/√fan-in. It runs task 0, then task 1, and compares every output value
with a floating-point model of the same network, built from the same
quantised weights. It also counts these events and fails if one never
happens:

* a ViT layer;
* an MoE layer;
* a skipped expert;
* a weight load under compute;
* compute waiting for a load;
* a task switch;
* outputs that differ between the two tasks.

It also checks that every Q x K run takes N²/P + P − 1 iterations.

* `tb_edge_moe_top` uses a reduced size: D = 16, 2 heads, 16 tokens, one
  ViT and one MoE layer, 16 experts with top-2 and 4 lanes. It runs in well
  under a second, with a maximum error of about 1e−3.
* The default configuration (M3ViT: 12 layers, D = 192, 128 tokens, 16
  experts with top-4) has not been simulated end to end. Building the
  testbench with its floating-point reference at that size took longer
  than was practical with Verilator, so the reduced size above is the
  largest simulated. The same body, `tb/edge_moe_tb_body.svh`, can be
  included by a wrapper with the default sizes and a 32 M-word DRAM model.

## Where this departs from the source design, and what is assumed

* **Token-sequential linear unit.** The reader, compute and writer overlap
  only within a token, because blocks compute while the previous block is
  written. The original design pipelines across tokens. Each token here
  costs in_dim + 4 extra cycles for reading.
* **M' x V iteration** takes dh + P + 2 cycles, because reading the P
  scores is not overlapped with the V stream.
* **Element-serial streaming.** Tokens stream one 32-bit word per cycle
  over simple word ports. The original uses wide AXI bursts. The DRAM port
  protocol itself is this design's own simplification.
* **Not given and assumed here:**
  * the weight fraction bits (12);
  * the MAC lane count (16);
  * top-k (4);
  * the expert hidden size (384);
  * the GELU table step (2^−8);
  * the attention scale as a shift;
  * the LayerNorm ε and datapath;
  * the exp-unit construction;
  * the DRAM layout and image format (HWC, one channel per word);
  * a positional embedding added in the patch-embedding writer;
  * no bias in the gating network;
  * ties in top-k going to the lower index;
  * metaqueue order by first use.
* **Not built:** the task-specific decoder heads, the host software, the
  AXI interconnect and the DRAM itself. The top brings out the memory ports
  instead.
* **Model sizes.** The defaults hold M3ViT. The other models the original
  work evaluates do not fit these defaults: ViT-Base/Large/Huge and
  DeiT-Small/Base have hidden sizes of 384–1280 and MLP sizes of 1536–5120.
  The sizes are parameters, so a larger instance needs bigger buffers
  (MAX_D, MAX_IN/MAX_OUT, and MAX_DH for ViT-Huge) and, for ViT-Large and
  Huge, a wider address.
* **Speed.** At the reduced test size one image takes about 39.5 k
  cycles. The default size has not been timed in simulation. It is
  expected to be well above the original's 34.6 ms at 300 MHz, mainly
  because of the single-word ports and the token-sequential linear unit.
