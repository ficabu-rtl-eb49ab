# FiCABU unlearning engine — SystemVerilog RTL

Machine unlearning removes the influence of chosen training data (the
*forget set*) from a trained network. FiCABU (Fisher-based Context-Adaptive
Balanced Unlearning, Cho et al., DATE 2026) does this on an edge device,
without retraining. It uses Selective Synaptic Dampening (SSD): every weight
whose importance to the forget set is far above its importance to the whole
training set is shrunk. FiCABU changes SSD in two ways that matter for
hardware:

* **Context-adaptive, back end first.** Layers are edited starting next to the
  classifier (layer *l* = 1) and moving toward the input (*l* = *L*). After
  chosen *checkpoint* layers the forget accuracy is measured. Once it is at or
  below a target τ (random-guess level), editing stops, and the front-end
  layers are never touched. This saves most of the work.
* **Balanced dampening.** The SSD hyperparameters (α, λ) are multiplied by a
  depth factor S(*l*). S is small at the back end, where edits should be
  strong, and large at the front end, where they should be gentle.

This repository holds RTL for the engine that does this work: the Fisher
(FIMD) unit, the Dampening unit, their scratchpad, the DMA, the sequencer
that runs the back-end-first loop as a patch pipeline, and the APB registers.
It also holds the processor's 64 KB on-chip SRAM. The RTL follows the
structure the paper publishes. Where the paper gives no detail (widths,
formats, buffer depths, bus protocol, register map), this implementation made
its own choices, and they are listed below.

## 1. The arithmetic

For each parameter θᵢ of a layer, with a forget batch of N samples:

```
I_Df[i]  = Σ_n grad[n][i]²                        (diagonal Fisher on the forget batch)
α_l      = S(l)·α,  λ_l = S(l)·λ                   (balanced dampening)
selected = I_Df[i] > α_l · I_D[i]                  (I_D: stored importance on all data)
β        = min(λ_l · I_D[i] / I_Df[i], 1)
θᵢ      ← selected ? round(β·θᵢ) : θᵢ
S(l)     = 1 + (b_r − 1)·(σ(l) − σ(1)) / (σ(L) − σ(1)),   σ(l) = 1/(1+e^−(l−c_m))
```

`I_D` is computed once after training and kept in main memory next to the
weights. The gradients come from the GEMM accelerator, one backward pass over
the forget batch. S(*l*) is evaluated by host software and written per layer
into the engine's layer table. The hardware only multiplies by it.

### Number formats (this implementation's choice)

| quantity | format | note |
|---|---|---|
| θ | INT8, packed 4 per 32-bit word | the paper targets INT8 models |
| gradient | INT8 | 64 × 128² < 2³² so the sum never overflows |
| I_Df, I_D | 32-bit unsigned integer | |
| α, λ (base and scaled) | unsigned Q16.8 | α = 10…50, λ = 0.1…1 fit; scaled values saturate |
| S(*l*) | unsigned Q8.8 | b_r = 10 fits |
| β | unsigned Q1.8, 256 = 1.0 | truncated |
| θ·β | rounded to nearest, arithmetic shift | stays in INT8 since β ≤ 1 |

The selection compares `I_Df·256 > α_l·I_D` exactly, in 56 bits, so there is
no rounding in the decision.

## 2. Where the engine sits

```
      host core (RISC-V)        DDR controller           GEMM accelerator
            |  APB                     ^  main-memory port    ^ start/done   | gradient writes
            v                          |                      |              v
  +---------------------------------- ficabu_top ------------------------------------+
  |  ue_regs --cfg--> ue_ctrl --start/done--> fimd ---------> scratchpad <--- GEMM   |
  |   (APB)           |   \---start/done--> dampening <-----> scratchpad            |
  |                   |    \--commands---> dma <-----------> scratchpad             |
  |                   +-- depth_scale (S(l)·α, S(l)·λ)                              |
  |  onchip_sram (64 KB, APB)                                                       |
  +---------------------------------------------------------------------------------+
```

Parts of the processor that come from elsewhere are not built. They are
reached through the ports of `ficabu_top`:

* **Host core and system interconnect.** They drive the two APB ports,
  `eng_apb_*` for the engine registers and `sram_apb_*` for the SRAM.
* **DDR controller.** It serves the DMA's main-memory port (`mm_*`). This is
  a simplified single-beat request/response port, not AXI.
* **GEMM accelerator.** For each patch it receives `gemm_start` with the
  layer, the patch index, the element count and the base of a gradient slot.
  It writes `N_BATCH × count` INT8 gradients into the scratchpad at
  `grad_base + n·PATCH + k` through `gemm_we/waddr/wdata`, then pulses
  `gemm_done`.
* **Partial inference at checkpoints.** The host runs it on the GEMM
  accelerator from cached activations. The engine only waits for the result.

## 3. The patch pipeline (ue_ctrl)

This is the part that takes most care to follow. A layer is cut into patches
of `PATCH` = 256 parameters. The last patch may be shorter. Three units work
on three different patches at the same time, as in the paper's
GEMM → FIMD → Dampening pipeline. Time advances in **slots**: in slot *t*

| unit | works on | reads | writes |
|---|---|---|---|
| GEMM (external) | patch *t* | — | gradient slot *t* mod 2 |
| FIMD | patch *t*−1 | gradient slot (*t*−1) mod 2 | I_Df slot (*t*−1) mod 2 |
| Dampening | patch *t*−2 | I_Df slot (*t*−2) mod 2, I_D and θ-in slot (*t*−2) mod 4 | θ-out slot (*t*−2) mod 2 |
| DMA, one command after another | load θ and I_D of patch *t*; store θ of patch *t*−3 | θ-out slot (*t*−3) mod 2 | I_D and θ-in slot *t* mod 4 |

A slot starts every unit that has a patch to work on. It ends when all of
them have reported done. So a layer of P patches takes P+3 slots. Each slot is
as long as its slowest stage, normally the GEMM pass over the batch, or FIMD's
`N_BATCH × PATCH` cycles. Because the units of one slot always use different
scratchpad slots, no region is read and written at the same address in the
same cycle, and no unit needs to stall. FIMD and Dampening finish a patch in
about N·PATCH and PATCH cycles. Both stay inside the GEMM patch window, which
is the paper's claim. The full-size test checks a per-layer bound of
(P+3)·(N·PATCH + 300) cycles.

After the last slot of a layer, the controller checks the layer's bit in the
checkpoint set:

* **Bit clear.** It goes on to the next layer. If this was layer L, the run
  ends.
* **Bit set.** It raises `cp_wait` (STATUS bit 2, and `irq`) and waits. The
  host measures the forget accuracy and writes it to `AFORGET`.
  * If `AFORGET ≤ TAU`, the run stops early: STATUS bit 3 is set, and `LDONE`
    gives the number of layers that were edited.
  * Otherwise the next layer starts.

### Scratchpad (scratchpad, sp_ram)

Every region is a one-read, one-write synchronous RAM with one cycle of read
latency:

| region | size | written by | read by |
|---|---|---|---|
| gradient | 2 × N·PATCH bytes (32 KB) | GEMM | FIMD |
| I_Df | 2 × PATCH words, stored twice | FIMD | FIMD (copy 1), Dampening (copy 2) |
| I_D | 4 × PATCH words | DMA | Dampening |
| θ-in | 4 × PATCH/4 words | DMA | Dampening |
| θ-out | 2 × PATCH/4 words | Dampening (byte enables) | DMA |

## 4. FIMD unit (fimd)

This is a four-stage pipeline that reads one gradient per cycle. For each
parameter *k* it walks through the samples n = 0…N−1:

1. **Load**: read `grad[n][k]`. With the first sample, and only when
   `accumulate` is set, also read the stored I_Df[k].
2. **Square**: compute the signed 8×8 square.
3. **Accumulate**: add to the running sum. At n = 0 the sum restarts from the
   stored value or from 0.
4. **Store**: after the last sample, hand I_Df[k] to the double buffer.

`done` pulses once the last word is in the scratchpad, about N·count + 10
cycles after `start`. In the engine, `accumulate` is tied to 0, because a
whole forget batch is processed in one pass. The input is there for batches
that arrive in several passes.

## 5. Dampening unit (dampening, beta_gen)

This is a five-stage pipeline that takes one parameter per cycle:

1. **Load**: read I_Df, I_D and the θ word.
2. **Compare**: compute `α_l·I_D` and decide whether the parameter is
   selected. The result drives the output multiplexer.
3. **β Calc**: `beta_gen` computes β. A multiplier forms `λ_l·I_D`. A
   comparator returns exactly 1.0 when `λ_l·I_D ≥ I_Df`. Otherwise an
   eight-step restoring divider produces the eight fraction bits of the
   quotient, which must then be below 1.
4. **Multiply**: compute θ·β with rounding. The multiplexer picks θ or the
   product.
5. **Store**: write a single byte with its byte enable into the θ-out region
   through the double buffer.

`sel_count` gives the number of selected parameters in the last patch.

## 6. Double buffer (double_buffer)

Both units end in a pair of buffers, Buffer A and Buffer B. The Store stage
fills one buffer. The buffer is closed when it holds `BUF_DEPTH` (16)
results, or when the last result of a patch arrives. The other buffer then
drains to the scratchpad at one word per cycle. The drain runs as fast as the
fill, so a buffer is always empty before it is needed again, and an assertion
checks this. As a result, the unit's memory writes never hold up its reads.

## 7. Programming the engine (ue_regs)

| offset | name | access | meaning |
|---|---|---|---|
| 0x000 | CTRL | W | bit 0: start |
| 0x004 | STATUS | R | bit 0 busy, 1 done, 2 checkpoint waiting, 3 stopped early, [15:8] layer index (*l*−1) |
| 0x008 | NLAYERS | RW | L |
| 0x00C | CPMASK | RW | checkpoint set, bit *l*−1 for layer *l* |
| 0x010 | ALPHA | RW | base α, Q16.8 |
| 0x014 | LAMBDA | RW | base λ, Q16.8 |
| 0x018 | TAU | RW | target forget accuracy |
| 0x01C | AFORGET | W | measured forget accuracy; writing it releases the checkpoint |
| 0x020 | LDONE | R | layers edited in the last run |
| 0x100 + 16(*l*−1) | layer table | RW | +0 parameter count (a multiple of 4), +4 θ byte address, +8 I_D byte address, +C S(*l*) Q8.8 |

The host follows these steps:

1. Write the layer table and the hyperparameters.
2. Write CTRL = 1.
3. Poll STATUS or wait for `irq`.
4. At each checkpoint, run partial inference and write AFORGET.
5. When done, read LDONE.

All APB ports run with no wait states, except SRAM reads, which take one
wait state.

## 8. Parameters

| parameter | default | origin |
|---|---|---|
| `N_BATCH` | 64 | the paper's forget batch size |
| `PATCH` | 256 | own choice (a 16×16 tile); the paper does not give the patch size |
| `MAX_LAYERS` | 32 | own choice; enough for ResNet-18 (21 weight layers) and ViT counted by encoder layer (14) |
| `BUF_DEPTH` | 16 | own choice |
| `SRAM_BYTES` | 65536 | the paper's 64 KB on-chip SRAM |

A layer can have up to 65,535 patches, which is 16.7 M parameters. That
covers the largest ResNet-18 layer (2.36 M) and a whole ViT-B encoder layer
(about 7.1 M).

## 9. Where this RTL departs from the paper, or goes beyond it

* **Not built:**
  * the Rocket core;
  * the GEMM accelerator (the paper uses the open-source VTA);
  * the DDR controller;
  * the peripherals;
  * the µNoC/AXI/APB interconnect.

  None of these is designed in the paper.
* **Main-memory port.** The DMA's port is a simplified valid/ready protocol
  with one outstanding request, not AXI.
* **DMA placement.** In the processor, the DMA is a unit beside the engine,
  with its own AXI port on the interconnect. Here it sits inside
  `ficabu_top`, and its bus side becomes the top's `mm_*` port.
* **FIMD read-back accumulation is unused.** The FIMD datapath adds each
  square to an I_Df value read back from the scratchpad. The engine
  processes a whole forget batch in one pass, so it ties the `accumulate`
  input to 0 and that read-back never happens in normal use. The unit
  testbench does exercise it.
* **S(*l*) is computed in software.** Only the multiplication by S(*l*) is in
  hardware, and the paper does not say where the sigmoid is evaluated.
* **The checkpoint decision** (A_forget ≤ τ) is in the controller. The paper
  gives the rule, but not which block applies it.
* **Slot scheduling** (a slot ends when all its stages are done), the DMA
  schedule, the scratchpad regions and slot counts, the double-buffer depth,
  the number formats and the register map are all this implementation's own.
* **Parameter counts must be multiples of 4,** because θ moves as 32-bit
  words. This is true of every layer of ResNet-18 and ViT-B.
* **No measured numbers reproduced.** The paper's speed-ups (11.7× for FIMD
  and 7.9× for Dampening, against the host core), FPGA resource counts and
  power figures are not reproduced or checked here.

## 10. Simulating

Every module has its own self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ficabu_pkg.sv tb/tb_ficabu_top.sv \
          --top-module tb_ficabu_top -Mdir obj_top -o sim && obj_top/sim
```

Replace `ficabu_top` with any other module name to run that module's test.
`verilator --lint-only -Wall -Irtl rtl/ficabu_pkg.sv rtl/<module>.sv` lints a
module. Files are one module, package or testbench each, and they are found
through `-Irtl`.

`tb_ficabu_top` runs the whole engine with every parameter at its default
(N = 64, 256-parameter patches) on four layers of 1024, 300, 512 and 256
parameters. In that run:

* the first checkpoint continues;
* the second checkpoint stops early;
* layer 4 is left untouched;
* every resulting weight is compared with an independent SSD model in the
  testbench;
* it counts the pipeline overlap, buffer swaps, selected and unselected
  parameters, the partial patch and DMA traffic, and fails if any of these
  never happened.

The run takes about 170 k cycles, under a second.

`tb_ficabu_resnet18` is a workload test, also at default size. It programs
the full 21-layer ResNet-18 table, counted from the classifier back to the
stem, with checkpoints at layers 1, 5, 9, 13, 17 and 21. It then forgets one
class twice:

* once with a 105-identity face classifier (53,760 weights, about 3.5 M
  cycles);
* once with a 20-class CIFAR-20 classifier (10,240 weights, about 0.67 M
  cycles).

In both runs, the first checkpoint reports random-guess forget accuracy, so
only the classifier is edited. The test checks the following:

* every classifier weight matches the SSD reference;
* the DMA never touches any other layer;
* the layer stays within its (P+3)-window time bound.

Running a deeper stage is the same mechanism, only longer. One 2.36 M-weight
stage-4 convolution takes about 150 M cycles. The unit testbenches use
small sizes (for example N = 4, PATCH = 16) and cover the cases listed in
their headers. Among them, `tb_dampening` covers β clipping at 1.0, I_Df = 0
and bytes outside the patch staying unchanged, and `tb_ue_ctrl` covers scheduling order, early stop and
runs with no checkpoint.
