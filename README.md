# CLONE accelerator RTL

An edge device running a pruned large language model has two problems that a small
companion chip can solve better than the GPU.

- **Adaptation.** One base model should serve requests from many domains, such as
  math, medicine and code. A set of LoRA adapters ("experts"), one per domain, provides
  this. Each request needs a *mix* of experts that fits it, and switching the mix must
  cost nothing.
- **Latency at low energy.** Each request comes with an end-to-end latency target.
  Other applications share the device, so the clock the LLM needs changes from request
  to request. Running the processors at the lowest voltage/frequency point that still
  meets the target saves energy. That point can be chosen per layer, as decoding
  proceeds.

The accelerator has two units on an AXI4-Lite bus:

- The **LPU** (LoRA Processing Unit) keeps every expert in non-volatile memory. It
  scores each request against the experts, mixes them with softmax weights, and adds
  the mixed adapter to each layer output that the host GPU hands it.
- The **SFU** (Special Function Unit) predicts how many tokens the request will produce
  and derives a per-token time budget from it. At every layer boundary, a small learned
  policy picks a V/F level, and the SFU drives an LDO regulator and an all-digital PLL
  to apply it.

A message channel between the two units carries the layer boundaries (from the LPU)
and the V/F acknowledgements (from the SFU).

All RTL is SystemVerilog-2017. The default parameters are those of a Llama-7B-sized
model:

| Parameter | Value |
|---|---|
| Hidden size | 4096 |
| Layers | 32 |
| LoRA rank | 8 |
| α (α/r = 2) | 16 |
| Experts (one per Flan-v2 domain) | 10 |
| Embedding length | 1024 |

## Block structure

```
 host AXI4-Lite ──► axi_splitter ──┬─► lpu ─────────────────────────┐
   (addr bit 31)                   │    ├ moe_router                 │ lpu_sfu_channel
                                   │    ├ lora_datapath              │ (two FIFOs,
                                   │    ├ pub_buffer (8 SRAM banks)  │  24-bit messages)
                                   │    └ envm_buffer (adapters)     │
                                   └─► sfu ◄────────────────────────┘
                                        ├ chip_ctrl (IDLE/WAKEUP/PREFILL/DECODE)
                                        ├ token_predictor (LUT + divider)
                                        ├ dvfs_policy (MLP Q-network)
                                        ├ energy_meter (power LUT)
                                        └ dvfs_controller ──► ldo  ──► vdd_mv
                                                          └─► adpll ─► proc_clk
```

`clone_top` instantiates all of these blocks. Its ports are plain signals:

- `clk` and `rst_n`;
- the five AXI4-Lite channels (`s_aw*`, `s_w*`, `s_b*`, `s_ar*`, `s_r*`; 32-bit
  address and data);
- the processor supply and clock it generates (`vdd_mv`, `proc_clk`, `proc_freq_mhz`);
- the present request phase (`phase`).

Three parts are not included:

- the chip's own clock PLL;
- the PCIe endpoint that bridges the host to the AXI port;
- the host itself, which runs the base model, the tokenizer and the sentence-embedding
  model.

The LDO and the ADPLL are analog parts. They are behavioural models (`rtl/ldo.sv`,
`rtl/adpll.sv`): the LDO is a slew-limited voltage with a power-good flag, and the
ADPLL is a delay-generated clock with a lock counter. They simulate, but they do not
describe circuits.

## Request flow

A request runs through four phases, held by `chip_ctrl`:

1. **IDLE.** The LPU is powered down. The eNVM keeps the adapters.
2. **WAKEUP.** Starts when the host writes SFU `CTRL.start`. The LPU is powered up,
   and the eNVM becomes readable after `WAKE_CYCLES` cycles.
3. **PREFILL.**
   - The SFU applies the prefill level (`PRELVL`), and the energy meter starts timing
     the prefill.
   - The host writes the prompt embedding (computed on the host by a sentence-embedding
     model) into the PUB and issues LPU `ROUTE`. The router produces the gate weights
     ω_j and the dominant expert, and sends `ROUTE_DONE(top)` to the SFU.
   - The SFU looks up the predicted output length N_pred for that task and the
     prompt-length bucket.
4. **DECODE.** Starts when the host writes `CTRL.first_token`.
   - The measured prefill time T_PRE fixes the per-token budget
     T_DEC = (T_target − T_PRE) / N_pred.
   - For every layer of every token, the host writes x and y = W0·x into the PUB and
     issues LPU `LORA`. The datapath replaces y with y′ and sends `LAYER_DONE(l)`.
   - The SFU evaluates the policy on (S_pro, T_PRE, T_DEC, l+1), applies the chosen
     level through the LDO and PLL, and answers `VF_ACK(level)`.
   - The host waits for that acknowledgement, so the next layer runs at the new point.

   `CTRL.eos` returns the chip to IDLE at level 0.

Routing is done once per request, and so is budgeting. LoRA passes and policy
decisions happen once per layer. "Hot-swapping" adapters costs nothing in this design:
all experts stay resident, and a new request only recomputes ω.

## LPU: routing

The router has no trainable parameters. For the prompt embedding g_x and one stored
embedding g_j per expert, it computes:

```
s_j = <g_x, g_j> / (|g_x| |g_j|)          (cosine, signed Q1.15)
ω_j = exp(s_j) / Σ_k exp(s_k)              (unsigned Q0.16, 65535 ≈ 1)
```

Work proceeds in three passes over 16-bit integer embeddings:

1. Stream every expert embedding beside the prompt embedding, LANES = 8 elements per
   cycle. This accumulates the dot products and squared norms.
2. For each expert, take a 24-step integer square root of each norm, then do a 64-step
   restoring division.
3. Softmax. `exp_neg` evaluates exp(s − max s) as 2^(−t), with t = (max − s)·log2 e:
   a shift for the integer part of t, and a cubic polynomial (error < 10⁻³) for the
   fraction. A sum and one division per expert follow.

**Latency** is at most N·(EMB_DIM/8 + 170) + 20 cycles, about 3,000 at the defaults.

**Results.** The ω_j and s_j are readable as registers. The dominant expert (ties go
to the lower index) is used as the "task" by the token predictor.

## LPU: the LoRA datapath

The host GPU computes the frozen projection y = W0 x. The chip adds the adapter term:

```
y′ = y + (α/r) Σ_j ω_j B_j A_j x
```

The experts are merged in rank space, so no D×D matrix is ever formed:

```
phase A:  u_q = A_q · x             for q = j·r + i   (N·r = 80 dot products of length D)
          v_q = ω_j · u_q           (gate weight applied once per rank component)
phase B:  y′[m] = y[m] + 2 · Σ_q B[m][q] · v_q        (D dot products of length N·r)
```

**Formats.**

| Quantity | Format |
|---|---|
| Activations and weights | 16-bit two's complement, 8 fraction bits (Q7.8) |
| ω | unsigned Q0.16 |
| Accumulation | exact, in 48 bits |
| Store | floor-shifted and saturated to 16 bits |

The testbenches compute the same integer arithmetic independently and require
bit-exact results.

**Throughput.** Eight multipliers run each cycle, on one eNVM word (8 weights) and one
PUB row (8 activations). There is no stall, so one pass takes exactly
2·N·r·D/8 + 3 = **81,923 cycles** at the defaults. This count is readable in the
`CYCLES` register and is checked by the testbenches.

**eNVM layout.** All indices below are 16-bit elements; a word holds 8 of them.

| Region | Element index |
|---|---|
| A_j[i][k] | q·D + k |
| B_j[m][i] | N·r·D + m·N·r + q |
| Expert embeddings | 2·N·r·D + j·EMB_DIM + i |

B is stored row by row of the output, so a phase-B read returns the 8 rank
coefficients that one output element needs.

The default eNVM is 83,200 words × 128 bits (1.33 MB). It holds **one** adapter set:
A and B of every expert for one projection. That set serves every layer.

**PUB layout.** The Processing Unit Buffer is 8 banks × 1152 words × 16 bit. Element e
is in bank e mod 8, so one row read returns 8 consecutive elements. It holds x
(elements 0..D−1), y/y′ (D..2D−1) and the prompt embedding (from 2D). Host writes
arrive as pairs of elements. A host write that hits a bank the datapath is using
stalls for one cycle; this is a *stall* the top-level test counts.

## SFU: per-layer DVFS

**Token predictor.** A host-written table of N_pred values, indexed by
(dominant task, ⌊log2 prompt_len⌋ capped at 15). A 32-step divider computes T_DEC in
microseconds; the result arrives 33 cycles after the request.

**Policy.** A Q-network: state → ReLU(W1 s + b1) → W2 h + b2 → argmax.

- State: 4 inputs (S_pro, T_PRE >> 10, T_DEC >> 10, next layer).
- Size: 32 hidden units and 16 actions, 688 parameters.
- Weights: Q8.8, in a host-written table; training happens off chip.
- Evaluation: one multiply-accumulate per cycle, so HIDDEN·(N_IN+1) + N_ACT·(HIDDEN+1)
  + 2 = **690 cycles** per decision. A layer pass takes 81,923 cycles, so the decision
  for layer l+1 is ready long before that layer starts.

**DVFS controller.**

- A 16-entry action table maps a level to {ADPLL code, LDO code}. The reset contents
  span 250–625 MHz and 0.60–0.90 V.
- Going up, the voltage is raised first and the frequency only after power-good.
  Going down, the frequency is lowered first and the voltage only after lock.
- After each code change the controller waits a guard time, so it cannot read the old
  setting's status.
- Requesting the level already in force is acknowledged in one cycle.
- The number of switches and the cycles spent settling are counted.

**Energy meter.** Every `TICK_CYCLES` cycles (1 µs at 100 MHz), the meter adds the
host-written power of the present level and phase (mW) to a 48-bit energy
accumulator (nJ), and advances the prefill or decode timer. This is the measured form
of the reward's energy term Σ_f (P_DEC^f·T_DEC + P_PRE^f·T_PRE). The table is meant to hold the measured power of the processors being scaled, which in the paper's system are the edge device's CPU and GPU. T_PRE for the budget
is taken from this timer.

**Backpressure.** While the SFU handles a message, it accepts no new one; the channel
FIFO (depth 4) holds it. Messages are 24 bits: a 4-bit type and a 20-bit payload.

| Type | Code | Direction | Payload |
|---|---|---|---|
| ROUTE_DONE | 1 | LPU → SFU | dominant expert |
| LAYER_DONE | 2 | LPU → SFU | layer finished |
| VF_ACK | 3 | SFU → LPU | level in force |

## Register and memory map

Address bit 31 selects the unit.

**LPU (bit 31 = 0).** Bits [30:29] select the region: 00 registers, 01 PUB window,
10 eNVM window. In the windows, byte address = 2·element, and each 32-bit word carries
{element n+1, element n}. Window accesses are refused while a command runs or the eNVM
is asleep; a refused access sets `STATUS.err`.

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | CMD | W | 1 = ROUTE, 2 = LORA |
| 0x04 | STATUS | R | {n_ack[15:8], vf_level[7:4], envm_ready, err, done, busy} |
| 0x08 | LAYER | RW | layer index sent with the next LAYER_DONE (then increments) |
| 0x0C | TOP | R | dominant expert |
| 0x10 | CYCLES | R | cycles of the last command |
| 0x40+4j | OMEGA j | R | ω_j, unsigned Q0.16 |
| 0x80+4j | SCORE j | R | s_j, signed Q1.15 (sign-extended) |

**SFU (bit 31 = 1).**

Bits [14:12] select the region:

| Bits [14:12] | Region |
|---|---|
| 0 | registers |
| 1 | MLP weights |
| 2 | predictor LUT (task·16 + bucket) |
| 3 | action table |
| 4 | power LUT (level·2 + {0 prefill, 1 decode}) |

In a table region, index = byte offset / 4.

| Offset | Name | Offset | Name |
|---|---|---|---|
| 0x00 | CTRL (start, first_token, eos) | 0x24 | ENERGY_H |
| 0x04 | SPRO | 0x28 | VF {freq_code, vdd_code} |
| 0x08 | TPRE (µs) | 0x2C | NSWITCH |
| 0x0C | TTARGET (µs) | 0x30 | NLAYER |
| 0x10 | PLEN | 0x34 | PRELVL |
| 0x14 | STATUS {requests, level, phase, busy} | 0x38 | SETTLE |
| 0x18 | NPRED | 0x3C | ACTION |
| 0x1C | TDEC (µs) | 0x40 | NPOLICY |
| 0x20 | ENERGY_L | 0x44 | TDECM (µs) |

`rtl/clone_pkg.sv` holds these constants, the message format and the phase encoding.

## Where this design departs from the paper, and what it adds

The paper fixes the design at the level of its blocks and algorithms:

- cosine-similarity/softmax routing over expert embeddings;
- the merged LoRA computation, with rank 8 and α = 16;
- the eNVM for adapters and the eight-bank processing-unit buffer;
- an SFU with a LUT-based predictor and a DVFS model of under 1K parameters;
- an LDO and an ADPLL;
- an AXI splitter, and a streaming channel between the two units.

Everything below that level is this design's own choice:

- the bus and the register maps;
- the message protocol;
- number formats and memory layouts;
- predictor indexing;
- the state scaling and the fourth (layer) input of the policy;
- the V/F table and the voltage-before-frequency ordering;
- the chip controller's state machine.

Known differences and limits:

- **When the decision is made.** The DVFS is meant to act layer by layer, and the
  decision for the next token is to be prepared while the present one decodes. This
  design takes a decision at each layer boundary, while the next layer is being set
  up, with the layer index as a fourth policy input. The decision (690 cycles) is
  short next to a LoRA pass (81,923 cycles).
- **One adapter set.** Distinct adapters for each of the 32 layers would need 32× the
  eNVM (about 42 MB). The paper does not say which projections carry adapters.
- **Training is off chip.** The DQN training, the offline pruning search and the
  sentence-embedding model are not hardware here. The policy, predictor and power
  tables are loaded by the host.
- **Plain integer arithmetic.** The base model runs in FP16 on the GPU; the adapter
  path here is Q7.8 integer arithmetic. Any conversion is up to the host.
- **Analog blocks are models.** The LDO and ADPLL have no circuit. Their time
  constants (10 mV per reference cycle, 32-cycle lock, 5 MHz and 5 mV per code step)
  are placeholders.
- **No temperature or top-k in the router.** The paper gives neither.
- **Layout and circuit figures.** The area and power numbers of the fabricated chip
  are not reproduced by this RTL, and the macros named in its layout (SRAM, eNVM) are
  modelled as arrays.

## Simulating

Every testbench is self-checking: it prints `TB_RESULT checks=N failures=M` and has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl \
          rtl/clone_pkg.sv tb/tb_clone_top.sv --top-module tb_clone_top
./obj_dir/Vtb_clone_top
```

Replace `tb_clone_top` with any `tb/tb_<block>.sv`. The time scale matters for the
ADPLL model, whose period is computed in nanoseconds.

| Testbench | What it shows |
|---|---|
| `tb_<block>` | Each block against an independent reference: routing weights, bit-exact LoRA output, predictor and budget, MLP argmax, energy sums, V/F sequencing order, LDO slew, PLL period, FIFO order and backpressure, bus decoding. Cycle counts are checked where the structure fixes them. |
| `tb_clone_top` | Whole chip at reduced size (D=32, r=2, N=4, EMB=32, 8 layers). It runs two requests end to end: routing, 48 LoRA passes, 32 policy decisions, up and down V/F switches, and all four phases. Stalls, backpressure and waits are counted, and the test fails if any mechanism never occurs. |
| `tb_clone_full` | Whole chip at the default (full) size. It runs one request: routing, a prefill over all 32 layers and one generated token of 32 layers (64 LoRA passes at D = 4096). Three passes are compared element by element with an exact reference, routing with a floating-point gate, the pass length with 81,923 cycles, and the final level with the policy's choice. About 66 ms of simulated time, under a minute of run time. |
| `tb_clone_llama13b` | The same request sized for a 13B Llama-2 model (D = 5120, 40 layers) by parameter overrides only. It checks the 102,403-cycle pass and that the policy sees layer indices above 31. |

The shared host procedure is in `tb/clone_flow.svh`: it generates data, loads the
memories and tables, and computes the references. The AXI master tasks are in
`tb/axil_host_tasks.svh`.

To change a size, override the parameters of `clone_top` (`D_MODEL`, `RANK`,
`N_EXPERTS`, `EMB_DIM`, `N_LAYERS`, `N_ACT`, `HIDDEN`, `TICK_CYCLES`, `WAKE_CYCLES`).
Two constraints apply:

- N_EXPERTS·RANK must be a multiple of 8 (LANES);
- D_MODEL and EMB_DIM must be multiples of 8.
