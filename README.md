# BitROM in SystemVerilog

## Design idea

A BitNet model has ternary weights (-1, 0, +1). Such weights are small enough to be fixed in
mask ROM, so a whole 1-billion-parameter model can live on the chip and inference never reloads a
weight. BitROM rests on three ideas:

1. **Bidirectional ROM array (BiROMA).** One ROM transistor holds two ternary weights, one per
   side. To read one side, the lines on the other side are driven as source lines and the lines
   on the read side are precharged as bitlines. A '0', '+1' or '-1' weight leaves the bitline at
   1/2 VDD, 1/4 VDD or VSS.
2. **Tri-mode local accumulator (TriMLA).** Two comparators (references 1/8 and 3/8 VDD) turn
   the bitline into two bits: MSB = weight is non-zero, LSB = add or subtract. Each 8-column
   group has an 8-bit accumulator. It skips zero weights and adds or subtracts its 4-bit
   activation for the others. Only when an output channel is complete does one adder tree per
   macro sum the 128 local results. This is *local-then-global* accumulation: 128 groups share
   one adder tree, and zero weights cost no accumulator activity.
3. **Decode-refresh eDRAM.** The Key/Value vectors of the first tokens of a sequence are kept on
   die in eDRAM. Decoding reads every earlier token at each step, so these rows are refreshed
   by use and need no refresh controller. The only condition is that the time between tokens
   stays below the retention time (64 ms).

A small digital LoRA adapter per layer (rank 16, 6-bit weights, 8-bit activations, a 4-input
multiplier-and-adder) adds a trainable correction to the frozen ROM projections.

The default configuration maps Falcon3-1B: 18 Transformer layers in 6 partitions of 3 layers.
Each layer has 15 macros of 2048 x 1024 cells. Each cell holds 2 weights, so a macro holds 4 Mi
weights. There are 270 macros and 1.13 G ternary weights in total. The six partitions work in
parallel on six batches as a six-stage pipeline. 13.5 MiB of eDRAM holds 32 tokens of KV-cache
for every batch, layer and KV head.

## Block structure

```
bitrom_top
 ├─ bitrom_ctrl            command execution, data movement, batch pipeline slot
 ├─ bitrom_partition x6    3 layers each
 │   ├─ lora_adapter x3    one per layer
 │   └─ bitrom_macro x45   15 per layer
 │       ├─ biroma            2048 x 1024 ROM array (behavioural)
 │       ├─ tri_comparator x128 (behavioural)
 │       ├─ trimla x128
 │       └─ adder_tree
 ├─ aux_arith              requantization of results
 ├─ kv_manager             on-die / external placement of KV entries
 ├─ dr_edram               13.5 MiB decode-refresh eDRAM (behavioural)
 └─ io_buffer              queues to external DRAM (uses sync_fifo)
```

`bitrom_pkg` holds the shared constants, enums and structs. It also holds the ROM contents
function `rom_weight(seed, row, col, side)`. This hash stands in for the mask programming: about
half of the weights are 0 and a quarter each are +1 and -1. Each macro gets its own seed, built
from its partition, layer and macro index.

The analog parts are behavioural models: the ROM array with its bitline levels, the comparator
pair, and the eDRAM with its retention. They are written as synthesizable-style SystemVerilog
with the real parts' ports. The digital parts are plain RTL.

## Macro (`bitrom_macro`)

**Weight layout.** Output channel `o` of a projection with `n_steps` row reads uses half-rows
`lin = o*n_steps + s`. Half-row `lin` is wordline `row_base + lin/2`, on the even side for even
`lin` and the odd side for odd `lin`. One half-row holds 1024 weights. Column `8g + c` of read `s`
multiplies activation `k = 1024 s + 8g + c`. So `n_steps` = K/1024: 2 for the 2048-wide
projections of Falcon3-1B and 8 for the 8192-wide Down projection.

**Sequence per channel.** Each row read takes 1 wordline/precharge cycle and then 8
column-select cycles. In each column-select cycle every group's TriMLA handles one weight. After
the last read, the adder tree adds the 128 TriMLA values into the 24-bit global accumulator.

**Timing without stalls.**

- 4-bit activations: a channel takes `9*n_steps + 2` cycles.
- 8-bit activations: a channel runs twice, once with the signed high nibbles and once with the
  unsigned low nibbles. The accumulator forms `16*high + low`. A channel takes
  `18*n_steps + 3` cycles.

The testbenches check both periods.

**LoRA.** With `lora_en`, the LoRA term `y >>> lora_shift` is added before the result is offered.

**Ports.** Results leave on `res_valid/res_ready` with their channel index. The macro waits
while `res_ready` is low. `zero_skips` counts skipped accumulator cycles. `ovf` reports an 8-bit
local wrap, which the paper says does not happen for real models.

## LoRA adapter (`lora_adapter`)

The adapter keeps its own copy of the layer's 8-bit activations. It computes B(Ax) in two phases:

- **Down (`down_start`).** The 16 rows of A stream in, 4 weights per word. Each rank sum is
  shifted right by `h_shift` and saturated to 8 bits, giving `h`.
- **Up (`up_start`).** For each output channel, 4 words of B stream in. The adapter offers
  `y = B h`, which the running macro takes on its LoRA input.

One 4-input multiplier-and-adder does all of the arithmetic.

## Host interface and commands (`bitrom_ctrl`)

Commands are `cmd_t` structs on `cmd_valid/cmd_ready`. The controller takes one command at a
time and holds `busy` until it is done. In these descriptions, `p` is a partition and `n` is an
output channel.

| op | effect |
|---|---|
| `OP_LOAD_ACT` | reads `count` words from `src_addr` and writes them to the activation buffers of layer `layer` in every partition of `part_mask` |
| `OP_LORA_DOWN` | streams 16 x `count` words of A from `src_addr` into the adapter of `layer` (lowest partition of the mask) |
| `OP_RUN` | starts macro (`layer`, `macro`) in all partitions of `part_mask` at once, with `count` channels, `n_steps`, `row_base` and `act_mode`. With `lora_en` (one partition only), it streams the B rows from `src_addr`. Results are requantized by `q_scale`, `q_shift` and `q_mode`. They go to external word `dst_addr + p*count + n`, or with `dest_kv` to the KV-cache (K or V by `kv_sel`) |
| `OP_KV_READ` | one decode step of one KV head: reads elements 0..255 of tokens 0..`count-1` and streams them out on `kv_out_*` |
| `OP_NEXT_SLOT` | advances the pipeline slot `s`. In slot `s`, partition `p` works on batch `(s - p) mod 6` |

**KV-cache destination.** With `dest_kv`, the KV-cache element for channel `n` is:

- element `n mod 256` of head `n / 256`;
- token `token`;
- layer `3p + layer`;
- batch `(slot - p) mod 6`.

**Sharing.** Results of parallel partitions share one requantizer in round-robin order.
`res_stalls` counts the cycles in which a finished result waited.

**External memory.** The external-memory side uses 32-bit words. It has a read-request port, a
read-data return port (in order, with no back-pressure) and a write port. `io_buffer` reserves
room for every outstanding read.

## KV-cache (`kv_manager`, `dr_edram`)

**Placement.** Token `t < 32` of a (batch, layer, head, K/V) vector goes to eDRAM row
`index*32 + t`. Later tokens go to external word `0x4000_0000 + (index*256 + t)*256 + element`.

**Retention.** Every eDRAM access records the time of its row. A read of a row not touched for
more than `T_RET` cycles returns 0 with an error flag. `T_RET` is 64 ms at an assumed 100 MHz
clock, which is 6.4 M cycles. `kv_manager` also flags two decode steps that are more than
`T_RET` apart.

**Counts.** The on-die and external read counts reproduce the paper's reduction of external KV
reads. At sequence lengths 32, 64, 128 and 256 with 32 tokens on die, the reduction is 100.0%,
74.6%, 43.6% and 23.4%.

## Parameters

| block | parameter | default | origin |
|---|---|---|---|
| biroma, bitrom_macro, bitrom_top | ROWS, COLS, GROUP_COLS | 2048, 1024, 8 | paper |
| trimla | IA_W, ACC_W | 4, 8 | paper |
| adder_tree | N, IN_W | 128, 8 | paper |
| lora_adapter | RANK, LANES, W_W, X_W, K_MAX | 16, 4, 6, 8, 8192 | paper |
| bitrom_top / ctrl | NP, LPP, NB | 6, 3, 6 | paper |
| bitrom_top | MPL (macros per layer) | 15 | derived from Falcon3-1B |
| kv_manager | ONDIE | 32 | paper |
| dr_edram | ROWS x COLS x 16 bit | 27648 x 256 | derived: 13.5 MiB |
| dr_edram, kv_manager | T_RET | 6,400,000 cycles | 64 ms at an assumed 100 MHz |
| io_buffer | DEPTH | 16 | own choice |

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block's outputs with
values computed independently in the testbench, and prints `TB_RESULT checks=… failures=…`:

| testbench | what it checks |
|---|---|
| `tb_biroma` | bitline levels for every selected weight, both sides, and invalid selects |
| `tb_tri_comparator` | truth table |
| `tb_trimla` | random add, subtract and skip sequences, signed and unsigned operands, overflow flag |
| `tb_adder_tree` | random sums |
| `tb_lora_adapter` | rank vector and outputs against a reference, with back-pressure |
| `tb_bitrom_macro` | 4-bit and 8-bit projections up to K = 8192, row wrap, LoRA, stalls, the channel period |
| `tb_aux_arith` | rounding and saturation in all three formats |
| `tb_io_buffer` | ordering and no loss under random back-pressure |
| `tb_dr_edram` | storage, refresh by reads, retention failure of an idle row |
| `tb_kv_manager` | placement, counters, the read-reduction figures, the TBT monitor |
| `tb_bitrom_ctrl` | command sequencing against behavioural partitions |

`tb/ext_mem_model.sv` is a behavioural external DRAM with a fixed latency and random
back-pressure. Its initial contents come from an address hash.

**End-to-end test.** `tb_bitrom_top` runs the whole design with 2 partitions of 2 macros per
layer. The ROM arrays (2048 x 1024), the eDRAM (13.5 MiB), the adapters and the controller are
all full size. The command sequence is in `tb/tb_top_body.svh`, written for any partition and
macro count. It runs these steps:

1. Load activations.
2. Run a 4-bit projection in all partitions at once, checking the cycle count.
3. Run a saturating 4-bit requantization.
4. Advance the pipeline slot.
5. Store Keys for 40 tokens, 32 on die and 8 external.
6. Read them back in one decode step per partition.
7. Run a LoRA down projection and a LoRA-corrected projection.

Every value is checked against a reference model. The test also counts each mechanism: parallel
partitions, result stalls, zero skips, both activation modes, LoRA, saturation, both KV
placements, slot advance and eDRAM refresh. A mechanism that never happens is a failure.

**No full-size simulation.** No testbench runs the default configuration of 6 x 3 x 15 = 270
macros. Verilator emits the evaluation code of every macro instance separately, about 0.7 MB
of C++ per macro. For 270 macros that is some 200 MB of C++. Compiling it would take hours on a
small machine, so a full-size run was not possible in a practical time. The default top is only
linted and elaborated. To run it, include `tb_top_body.svh` in a testbench with `NP = 6` and
`MPL = 15` that instantiates `bitrom_top` without parameter overrides.

## Differences from the paper and things not built

- **Activation functions and softmax.** The auxiliary arithmetic unit only requantizes. The
  paper names floating-point activation functions and softmax but gives no format or method, so
  they are not built. Attention (QKᵀ, softmax, ·V) is therefore left to the host, which reads
  the KV-cache through `OP_KV_READ`.
- **8-bit activations.** The paper says 8-bit activations are handled "in two cycles with
  shifting and accumulation". Here the two nibbles are two full passes over the row reads,
  combined by a 4-bit shift in the global accumulator. The total cost is the same: twice the
  4-bit cycles.
- **Per-group activations.** Each group of 8 columns reads its own activation, taken from Fig.
  4's weight/activation pairs per local accumulator.
- **ROM contents.** They come from a hash function, not from a trained model. Loading a real
  model would mean replacing `rom_weight` with a table per macro.
- **eDRAM.** The eDRAM, the bitline voltages and the comparators are behavioural. Their timing
  (read in one cycle, compare in the column-select cycle) is a choice of this design.
- **Clock frequency.** The paper gives none. 100 MHz is assumed only to turn 64 ms into cycles.
- **Controls not modelled.** The DEQ (equalize) control of Fig. 5 is folded into the
  precharge signals.
- **Partition-level parallelism.** Partitions work in parallel. The macros inside a partition
  run one at a time under one command. The host sequences the projections of a layer.
- **Sizing.** The macro count per layer (15) and the eDRAM geometry are derived from Falcon3-1B
  sizes that the paper does not print. These are hidden size 2048, MLP size 8192, and head
  dimension 256.
- **External DRAM.** External DRAM is outside the design. Its ports are brought out of
  `bitrom_top`.
