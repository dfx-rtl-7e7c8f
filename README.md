# DFX: a multi-FPGA ring for low-latency GPT-2 text generation

Text generation with a GPT-style decoder happens in two stages. The *summarization* stage
reads the prompt. The *generation* stage then produces one token at a time, and each new token
must pass through every decoder layer before the next one can start. The second stage is
sequential and dominates latency. A GPU spends most of it under-utilized, because
every step is a matrix-vector product, not a matrix-matrix product.

DFX is built for that vector-at-a-time workload:

- A ring of FPGAs each runs one **core**.
- The model is split *inside* each layer:
  - Each core owns a subset of the attention heads and a slice of the columns of every
    fully-connected layer.
  - The cores exchange their partial results four times per layer.
- A core streams weights from HBM at one 64 x 16 half-precision tile per cycle. It feeds them
  into a matrix unit that multiplies one 64-element input vector by 16 weight columns per
  cycle.
- Everything else is done beside the matrix unit, on 64-element vectors:
  - LayerNorm
  - softmax
  - GELU
  - residual additions
  - token embedding
  - arg-max token selection

This repository holds synthesizable SystemVerilog for one core (`dfx_core`) and its parts,
plus testbenches, including a two-core ring that generates tokens end to end.

## One core at a glance

```
                 host: program + configuration
                              |
   controller --> scheduler --+--> scoreboard
   (token loop)   (fetch/issue per unit)
        |              |          |            |             |
        |       matrix operand   vector operand  DMA          router
        |        collector       collector      (HBM, DDR)   (ring links)
        |           |               |              |             |
        |     MFU (16 lanes x 64)  VFU (64 wide)   weight FIFO   TX/RX buffers
        |     SFU_M: scale, mask,  SFU_V: sum,     load/store/KV
        |     GELU, max/argmax     mean, rsqrt..   buffers
        |           \______________/
        |         vector register file (512 x 64 fp16)
        |         scalar register file (64 fp16)
```

| block | file | role |
|---|---|---|
| controller | `controller.sv` | Walks token positions and decoder layers, and starts program sections. |
| scheduler | `scheduler.sv` | Fetches instructions and issues each to its unit, in order. |
| scoreboard | `scoreboard.sv` | Stale bits for registers, plus read locks. |
| instruction buffer | `instr_buffer.sv` | 1024 x 128-bit program memory, written by the host. |
| matrix operand collector | `matrix_operand_collector.sv` | Turns a matrix instruction into a tile schedule for the MFU. |
| MFU | `mfu.sv`, `mfu_lane.sv` | 16 lanes. Each lane has 64 multipliers, a 6-level adder tree and an accumulator. |
| SFU_M | `sfu_m.sv`, `gelu_lut.sv`, `reduce_max.sv` | Scale, causal mask, GELU, 16-to-64 vectorizer, and max/arg-max. |
| vector operand collector | `vector_operand_collector.sv` | Streams vector instructions through the VFU and SFU_V. |
| VFU | `vfu.sv` | 64-wide add, sub, mul, exp(a-b), and bypass. |
| SFU_V | `sfu_v.sv`, `fp16_adder_tree.sv` | Sum of a vector stream, then optionally x 1/emb, + eps, 1/x or 1/sqrt(x). |
| register files | `vector_regfile.sv`, `scalar_regfile.sv` | Operand storage. |
| DMA | `dma.sv` | HBM/DDR transfers, key store, transposed value store, embeddings, tokens. |
| router | `router.sv` | Ring all-gather of partial results. |
| arithmetic | `fp16_mul/add/exp/rcp.sv`, `dfx_pkg.sv` | Half-precision operators. |

All data are IEEE half precision (1-5-10):

- Subnormals are flushed to zero.
- Results are rounded to nearest even.
- Operator latencies are multiplier 6 cycles, adder 11, exponential 4, and reciprocal or
  reciprocal square root 8.

The first three latencies are the ones the original design uses for its floating-point IP
cores. Here each result is computed in the first stage and carried through a register pipe of
that depth. Timing is therefore cycle-exact to the original, but the logic depth of stage one
is not.

## How a token is processed

The host loads a program into the instruction buffer and writes a configuration, then pulses
`start`. The configuration holds:

- core id and number of cores
- number of layers
- input and output token counts
- the start addresses of three program sections
- memory strides
- 1/emb, epsilon and the attention scale

The controller then repeats, for every token position `t`:

1. **EMBED**: read the token's row of the token-embedding table and the row `t` of the
   position-embedding table, and add them. For `t < n_in` the token comes from the input list
   in DDR. After that, it is the token the core generated last.
2. **LAYER**, once per decoder layer. The layer index is added to memory addresses of
   instructions that carry the `F_LAYER` flag, so one copy of the layer program serves every
   layer.
3. **HEAD**, only from the last input token on: final LayerNorm, the LM head (a matrix product
   against the vocabulary), arg-max, and storing the token to DDR.

Each section ends with an `END` instruction. `END` waits until every unit is idle, so sections
never overlap. Prompt tokens go through the same path one at a time. That is why the
summarization and generation stages need no separate hardware.

## The instruction word

128 bits, fields `itype(2) op(5) flags(9) src1(24) src2(24) dst(24) len(16) aux(16)
rsvd(8)`. There are three instruction classes:

- **compute**: matrix (`CONV1D`, `MM`, `MASKED_MM`) or vector (`VADD VSUB VMUL VEXP VACCUM
  VLOAD VSTORE`)
- **dma**: `D_WEIGHT D_BIAS D_LDVEC D_STVEC D_EMB D_STK D_STV D_STTOK`
- **router**: `R_SYNC`

Matrix instructions:

- Multiply `len` input vectors (registers `src1...`) by a weight matrix streamed from HBM.
- Produce `aux` 64-element output vectors (registers `dst...`).
- Flags:
  - `F_GELU` applies GELU.
  - `F_SCALE` multiplies by the attention scale.
  - `F_MAX` writes the row maximum to scalar register `src2`.
  - `F_ARGMAX` makes the arg-max the generated token.
  - `MASKED_MM` sets every column after the current token position to the most negative
    finite half value.

Attention over all tokens seen so far has lengths that grow with `t`. The flags `F_TS_IN` and
`F_TS_OUT` therefore multiply `len` or `aux` by ceil((t+1)/64), the number of 64-token tiles.

Vector instructions work on `len` consecutive registers:

- `F_SCALAR` makes `src2` a scalar register broadcast to all 64 elements.
- `VEXP` computes exp(src1 - scalar), the max-subtracted softmax numerator.
- `VACCUM` sums every element of its input into one scalar. Its flags choose the
  post-operation, which covers the mean, 1/sigma for LayerNorm and 1/sum for softmax.

`tb/tb_dfx_core.sv` contains a complete GPT-2 layer program written with these instructions. It
is the best reference for how they combine.

## The matrix path: tiles, zigzag and the 12-cycle rule

A weight matrix is cut into tiles of d x l = 64 x 16: 64 input rows by 16 output columns. One
tile is exactly one HBM beat, 32 channels x 512 bits. The MFU takes one tile and one
64-element input chunk per cycle. Every lane multiplies the chunk by its own column and reduces
the 64 products in an adder tree. The accumulate adder then adds the sum either to the bias (on
the first chunk) or to the lane's partial-sum buffer.

The matrix operand collector walks each group of 64 outputs:

- For every input chunk, it reads the chunk from the register file once.
- It then issues the four 16-column tiles of that group in four consecutive cycles, using
  partial-sum slots 0-3.
- This is the zigzag order over a 64 x 64 block: down the four column tiles, then on to the
  next input chunk.

The accumulate adder takes 11 cycles, so slot 0 can accept its next chunk only 12 cycles after
the previous one. The collector therefore starts a new chunk exactly every 12 cycles. The
MFU's result for a group leaves 83 cycles after its last chunk:

- 6 cycles for the multiplier
- 6 x 11 for the adder tree
- 11 for the accumulator

The result then passes through SFU_M:

- 6 cycles for the scale
- 2 for mask and GELU
- then the vectorizer, which joins four 16-wide results into one 64-wide register write

The weight tiles come from a 32-entry FIFO that the DMA fills ahead of use (`D_WEIGHT`). The
DMA issues reads only while the FIFO has room for them, so the weight fetch of the next
instruction overlaps the current computation. If fewer than four tiles are waiting when a chunk
should start, the collector stalls.

Keys and values are stored so that attention reuses the same datapath:

- **Keys** (`D_STK`): the key of token `t` is written into lane `t % 16` of beat
  `base + t/16`. A beat then holds 16 keys, which is exactly a tile of the product
  Query x Key^T.
- **Values** (`D_STV`, the transpose unit): element `c*16 + j` of the value of token `t` is
  written into row `t % 64` of lane `j` of beat `base + (t/64)*4 + c`. Per-element write
  strobes leave the other tokens untouched. Reading these beats in order gives the tiles of
  Score x Value.

## The vector path

The vector operand collector runs one vector instruction at a time:

- It reads one or two registers per cycle.
- It sends them through the VFU and then SFU_V, and writes one vector per cycle back.
- It waits for the last write before accepting the next instruction.

That costs a few idle cycles per instruction. In return, the different VFU latencies (1 for the
bypass, 6 for mul, 11 for add or sub, 15 for exp(a-b)) can never collide at the write port.

Other paths through the vector unit:

- `VLOAD` and `VSTORE` move vectors between the register file and the buffers (load, key/value,
  router TX/RX) through the one-cycle bypass.
- `VACCUM` routes the stream into SFU_V's adder tree and accumulator. It writes a scalar
  register at the end.

## Dependencies: scheduler and scoreboard

The scheduler needs two cycles per instruction, one to fetch and one to decode and issue. It
issues in program order, one running instruction per unit: matrix, vector, DMA and router. So
weight fetch, matrix work, vector work and a synchronization can all run at once.

Before issue, the scoreboard compares the instruction's register ranges with those of running
instructions:

- A stale bit per vector and scalar register gives read-after-write and write-after-write
  protection. The bit is set at issue and cleared when the writing unit finishes.
- A read lock on each running instruction's source range gives write-after-read protection.
  This is needed because a short vector instruction may otherwise overwrite what a long matrix
  instruction is still reading.

There are two further waits:

- DMA instructions that use the generated token wait until the matrix unit is idle.
- Buffer reads wait for data. `VLOAD` from an empty buffer holds, and the router holds until
  its TX buffer is filled.

## Synchronization between cores

After each split computation, every core holds `n` vectors of the result. `R_SYNC n` performs
an all-gather over the ring:

- Each core sends its own vectors to its right neighbour as four 256-bit flits each, with no
  header.
- It then forwards what it receives from the left.
- The k-th block of `n` vectors to arrive comes from core `(id-1-k) mod N`. It is written to
  RX position `origin*n + i`, so every core ends with the same core-ordered result, and is
  forwarded while `k < N-2`.
- Forwarding reads the stored vector back, so no extra buffer is needed.
- The RX buffer becomes readable only when all vectors are in.
- Incoming flits wait in a 512-flit input FIFO, so neighbours need not start together.

A layer uses four synchronizations: after attention, after the output projection, after FC1
and after FC2. With `N = 4` and `n = 4`, a synchronization takes 51 cycles from a common start.

## Where this RTL departs from the original design

- **Ring direction.** The original router drives both ring directions. This one uses one
  direction, which takes up to N-1 hops instead of N/2.
- **Bias.** The MFU's bias input is tied to zero in the core. Biases are loaded from DDR and
  added by a `VADD`, which costs one extra vector instruction per layer product.
- **Floating-point operators.** These are this design's own. Latencies match, but results may
  differ from vendor cores in the last bit (subnormal flushing, exp by polynomial).
- **Masking.** The mask value is -65504, not -inf, so that exp and max stay finite.
- **LM head.** Every core computes the full LM head and arg-max, and each gets the same token.
  The original text does not say how the LM head is split.
- **Program format.** The instruction word layout, flags, section structure and token-tile
  scaling are this design's own. The original gives only the instruction classes and their
  operand lists.
- **Memories.** HBM and DDR are outside the core. The core has request/response ports for them
  (in-order responses, one request per cycle), and the testbench models them. The PCIe host
  link, the memory controllers and the serial transceivers are not included.
- **Register file size.** With default sizes the vector register file has 512 entries. The
  GPT-2 LM head produces 786 vectors of scores, so its register writes wrap around. This is
  harmless, because only the arg-max is used and nothing else is live at that point.

## Verification

Every block has a self-checking testbench in `tb/`, run with two-state simulation and random
initial values:

- **fp16 operators**: compared with real-number references over random and special operands;
  the latency is checked.
- **MFU lane and MFU**: dot products against a model; the 83-cycle latency and the 12-cycle
  slot reuse are checked.
- **GELU table and reduce-max**: compared against references.
- **SFU_M**: checked against a reference for scale, mask, GELU and the reductions.
- **VFU and SFU_V**: each operation and its latency; mean, rsqrt and reciprocal.
- **Register files and instruction buffer**: model comparison.
- **Scoreboard**: hazards of each kind, and a random comparison against a model.
- **Scheduler**: order, unit choice, busy and hazard holds, scaled lengths, and an issue rate
  of one instruction every two cycles.
- **Controller**: the section sequence.
- **Matrix operand collector**: tile order, 12-cycle spacing and weight stalls.
- **Vector operand collector**: addresses, opcodes, scalar broadcast, bypass and buffer waits.
- **DMA**: weight prefetch bounded by the FIFO, one beat per cycle at full rate, embeddings,
  key and transposed value layouts, and strobed token store.
- **Router**: four-core all-gathers with staggered and aligned starts, and the completion time.

`tb_dfx_core` runs two cores at their default parameters as a ring:

- a GPT-2-shaped model with embedding 128 (one 64-wide head per core), 2 layers, vocabulary
  128, 4 prompt tokens and 3 generated tokens
- 84 instructions, finishing in about 25,000 cycles

It checks that:

- both cores generate the same tokens, inside the vocabulary;
- both cores end with the same non-zero hidden state, which shows that the all-gathers
  combined the slices;
- the tokens are stored in DDR;
- keys reach HBM;
- weight stalls, hazard stalls, bypasses, masking, GELU, synchronization, transposes and token
  feedback all occur.

It does not compare the generated tokens with a floating-point reference model of GPT-2.
Agreement between the cores and the unit-level numeric checks are the evidence of correctness.
The largest configuration simulated is this two-core ring. Full GPT-2 sizes were not
simulated.

Simulate any testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/dfx_pkg.sv tb/fp16_ref_pkg.sv rtl/*.sv \
          tb/tb_dfx_core.sv --top-module tb_dfx_core -Mdir obj && obj/Vtb_dfx_core
```

Each testbench prints `TB_RESULT checks=N failures=M`. The MFU has 1024 half-precision
multipliers per core, so building the core or `tb_mfu` takes several minutes.

## Sizes

The default parameters are:

- d = 64 and l = 16
- 256-bit ring flits
- 32 HBM channels x 512 bits per beat
- a 200 MHz target clock

They hold the three GPT-2 sizes the original appliance runs:

| model | cores | hidden size | heads | layers |
|---|---|---|---|---|
| 345M | 1 | 1024 | 16 | 24 |
| 774M | 2 | 1280 | 20 | 36 |
| 1.5B | 4 | 1536 | 24 | 48 |

For these three models:

- Per-core weights stay under 0.8 GB of the 8 GB HBM.
- The widest all-gather (FC1 of the 1.5B model, 96 vectors) fits the 128-vector RX buffer.
- Prompts up to 128 tokens plus 256 generated tokens need at most 6 score tiles per head.
