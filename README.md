# QeiHaN-style near-data DNN accelerator in SystemVerilog

A fully-connected layer of a neural network is mostly a long sequence of
multiply-accumulates between input activations and weights. This design does
those multiplications without multipliers and without fetching most of the
weight bits. It sits on the logic die at the bottom of a 3D-stacked DRAM
(an HMC-like stack with 16 vaults), one small processing element (PE) under
each vault, so weights never cross an off-chip bus.

Two ideas make it work:

1. **Activations become powers of two.** Each FP16 input activation `x` is
   replaced by its sign and a 4-bit exponent `x~ = clip(round(log2|x|), -8, 7)`.
   The product `w * x` becomes `+-(w << x~)`, a shift, and the PE needs only
   adders. The smallest code, -8, means "zero or too small": such an input is
   skipped entirely.
2. **Weights are stored one bit plane per DRAM bank.** For a negative exponent,
   `w * 2^x~` loses its `|x~|` least significant bits anyway, so only the
   `8 - |x~|` most significant bits of each INT8 weight are read. Bit `b` of 32
   weights (one per output kernel) forms one 32-bit word, and the words of
   different bit positions live in different banks. Skipping low bits therefore
   means issuing fewer DRAM reads, not reading and discarding. Because the
   stack uses a closed-page policy, consecutive reads to different banks
   overlap, and the layout is built to exploit that.

With typical activation statistics a large share of exponents is negative, so
a large share of weight traffic disappears. That traffic dominates the energy
of a near-data accelerator.

## Organisation

```
            logic die (qeihan_top): 4 x 4 mesh, one tile per vault
   +-------------------+     +-------------------+
   | tile (0,0)        |<--->| tile (1,0)        |<---> ...
   |  router  VC  PEC  |     |  router  VC  PEC  |
   |  PE               |     |  PE               |
   |  reduction + SFU  |     +-------------------+
   +-------------------+            ^
            ^  TSV command/data     | (2D mesh links, XY routing)
            v                       v
        vault 0 DRAM           vault 1 DRAM       (4 dies x 4 banks each)
```

| module | role |
|---|---|
| `qeihan_pkg` | sizes, types (`lq_t`, `vaddr_t`, `vreq_t`, `flit_t`, `layer_cfg_t`), DRAM layout functions |
| `qeihan_top` | 16 tiles and the mesh links; per-vault DRAM ports |
| `tile` | router + vault controller + PE controller + PE; tile (0,0) adds the reduction unit and SFU |
| `pe` | datapath: input buffer, LOG2 quantizer, weights buffer, decoder & shifter, ADD array, output buffer |
| `pe_controller` | address generation and sequencing of the dataflow for one tile |
| `log2_quant` | FP16 to {sign, exponent, prune} |
| `input_buffer` | 64 B double-buffered FP16 input buffer (2 x 16 entries) |
| `weight_buffer` | 64 B: 2 slots x 8 bit planes x 32 weights |
| `decoder_shifter` | bit planes to 16 shifted 16-bit products |
| `add_array` | 16 saturating add/subtract units |
| `output_buffer` | 2 KB of 16-bit partial outputs, 64 rows x 16 lanes |
| `reduction_unit` | sums the partial outputs of all 16 PEs (central tile only) |
| `sfu` | de-quantization to FP16, ReLU or table activation, max pooling (central tile only) |
| `router` | 5-port mesh router with 2-entry input queues |
| `vault_controller` | closed-page DRAM scheduler with per-bank busy timers |
| `sync_fifo` | small first-word-fall-through FIFO used throughout |

The fixed sizes come from the main configuration of the original
architecture:

- 16 vaults and 16 PEs;
- 4 DRAM dies, with 4 banks per vault on each die;
- 16 adders per PE;
- a 32-bit vault bus, so each request returns one bit of 32 weights;
- INT8 weights and 4-bit exponents;
- 16-bit partial outputs;
- about 2.1 KB of SRAM per PE.

That total is split here as 2 KB output buffer, 64 B input buffer and 64 B
weights buffer.

## Arithmetic

**Quantizer.** For an FP16 value with biased exponent `e` and fraction `f`,
`round(log2|x|) = (e - 15) + (1.f >= sqrt 2)`. The comparison is a single
10-bit compare, `f >= 425`, because `424/1024 < sqrt2 - 1 < 425/1024`. The
result is clipped to [-8, 7]. The following all set `prune`:

- zero;
- subnormals;
- everything that clips to -8, i.e. `|x| < 2^-7.5`.

Inf and NaN clip to +7.

**Products.** Weights are two's-complement INT8. For `x~ >= 0` the product is
`sext16(w) << x~`; it always fits, since `127 * 2^7 < 2^15`. For `x~ < 0` it is
`sext16(w) >>> |x~|`, which equals `floor(w * 2^x~)`. That result depends only
on the `8 - |x~|` top bits, which is why the lower planes need not be fetched.
The decoder masks the unfetched planes, so stale buffer contents cannot leak
in. The sign of the activation decides add or subtract.

**Accumulation.** Each PE accumulates its share of the inputs into 16-bit
partial outputs that saturate at the int16 limits. The central reduction adds
the 16 partials of an output in 20 bits, which cannot overflow, and saturates
the total to int16.

**De-quantization.** The SFU converts the int16 sum to FP16 and multiplies by
`2^scale_exp`. The combined weight and activation scale is assumed to be a
power of two, so the multiply is an exponent add. The int-to-FP16 conversion
truncates; it is exact below 2048. Results under the normal FP16 range flush to
zero, and overflow saturates to the largest finite value.

The SFU then applies one activation, selected by `act_mode`:

| `act_mode` | activation |
|---|---|
| 0 | none |
| 1 | ReLU |
| 2 | 64-entry FP16 look-up table, index `clip(floor(4*y), -32, 31) + 32` |

The table covers [-8, 8) in steps of 0.25. It is written through `lut_*`, so
any non-linear function can be loaded: sigmoid, tanh, GELU and so on.

Finally the SFU takes the maximum over windows of `2^pool_log2` consecutive
outputs.

## Where data lives in a vault

A vault has 16 banks, addressed as die[1:0] and bank[1:0]. Each row is one
32-bit word. Per tile, with `i` the tile-local input index and `kg` the
kernel group (32 consecutive outputs):

| data | die | bank | row |
|---|---|---|---|
| weight bit plane `b` of group `kg` for input `i` | `{kg[0], b[2]}` | `b[1:0]` | `w_row_base + 16*i + kg[4:1]` |
| input word `w` (FP16 inputs `2w`, `2w+1`; low half first) | `w[3:2]` | `w[1:0]` | `in_row_base + w/16` |
| output `j` of the layer, stored in vault `j % 16` as word `j/16` | `(j/16)[3:2]` | `(j/16)[1:0]` | `out_row_base + j/256` |

Bits 0 to 3 of a weight group sit in the four banks of one die and bits 4 to 7
in the four banks of the next die. Odd kernel groups use the other two dies.
So the reads for group `kg+1` never queue behind the reads for group `kg`.

Inputs are split across vaults by input channel: vault `v` holds its own `n_in`
inputs and the weights connecting them to all outputs. Every PE therefore
produces a partial sum for every output, and the partials are added centrally.
A layer's outputs are written back interleaved over the 16 vaults, ready to be
the next layer's inputs.

## One layer, cycle by cycle

Each tile's `pe_controller` runs four engines at the same time.

1. **Input fetch.** Inputs are read from the vault in bursts of 8 words, which
   fills half of the input buffer. A new burst starts whenever fewer than two
   halves are full or reserved. The next block of inputs therefore loads while
   the current one is being processed.
2. **Weight fetch.** The head of the input buffer goes through the quantizer.
   - A pruned input is popped in one cycle, with no DRAM access.
   - Otherwise, for each of the `n_kg` kernel groups, it requests bit planes 7
     down to `max(0, -x~)`, one 32-bit word per request.
   - The words fill one of the two weights-buffer slots. While one slot is
     computed, the next group's planes arrive in the other.
3. **Compute.** A full slot takes two compute steps, because 32 weights feed
   16 adders. Each step reads the slot, shifts 16 weights, reads one output
   buffer row (`2*kg + batch`), adds or subtracts, and writes the row back, all
   in one cycle. The slot is then freed.
4. **Drain and results.** After its last input, the tile reads its
   `32*n_kg` partial outputs and sends them to tile (0,0) as PARTIAL flits,
   then sends a DONE flit. Tile (0,0) accumulates all partials. After 16 DONE
   flits it streams the sums through the SFU and sends each final FP16 output
   `j` to tile `j % 16` as a RESULT flit. That tile writes the output to its
   vault. A tile raises `done` when it has drained and stored every result it
   owns. `qeihan_top.done` is the AND of all 16 tiles.

The vault controller arbitrates among these requests in a fixed priority:
result writes first, then weight reads, then input reads. Read data returns in
order, and a tag FIFO in the PE controller routes each word to the input
buffer or to a weights-buffer slot.

The weight fetch sets the rate. The vault bus carries one word per cycle, so
an input with exponent `x~` costs about `n_kg * (8 - max(0, -x~))` cycles, and
a pruned input costs one. In the full-size test, a 640-input, 64-output layer
takes 1579 cycles from `start` to `done`. A 192-input, 32-output layer with
pooling takes 661 cycles.

## Network

- Packets are single 36-bit flits with these fields:
  - destination x and y;
  - source tile;
  - kind: PARTIAL, DONE or RESULT;
  - 10-bit output index;
  - 16-bit payload.
- Routing is dimension-ordered: first along x, then along y. This is
  deadlock-free on a mesh and keeps the flits of one source-destination pair
  in order.
- Every router input has a 2-entry queue.
- Every output port grants one input per cycle in round-robin order.
- A flit moves one hop per cycle when the next queue has room.
- In tile (0,0), locally ejected PARTIAL and DONE flits go to the reduction
  unit, and RESULT flits go to the PE controller.
- The SFU's results have priority over the tile's own partials for injection.

Each PE reaches its own vault through its vault controller directly, not
through the router.

## Vault controller and DRAM interface

Each access is closed-page: activate, one 32-bit read or write, then
precharge. During that access its bank is busy for `T_RC` = 8 cycles. The
controller holds up to 4 requests and issues them in order. The oldest request
goes out as soon as its bank's timer has expired, at most one command per
cycle. Requests to 8 different banks therefore issue on 8 consecutive cycles,
while two requests to the same bank are 8 cycles apart. `stall_cycles` counts
cycles in which the head request waits for a busy bank.

The DRAM itself is outside the design. Per vault, the top has three signals:

- `cmd_valid`, which issues a command;
- `cmd`, which carries `{we, die, bank, row, wdata}`;
- `dram_rvalid`/`dram_rdata`, which return read data in command order, at any
  fixed latency.

`tb/dram_stack_model.sv` is a behavioural model of the stack. It has a
6-cycle read latency, and it counts any command that reaches a bank before
`T_RC` has elapsed.

## Running a layer

1. The host writes each vault's inputs and weight planes, using the layout
   above.
2. It drives `cfg` (`layer_cfg_t`, shared by all tiles):
   - `n_in`, the inputs per vault, at most 1023;
   - `n_kg`, the kernel groups: outputs = 32 * `n_kg`, at most 32 groups
     (1024 outputs, the output buffer size);
   - the three row bases;
   - `scale_exp`, `act_mode` and `pool_log2`.
3. It optionally loads the SFU table.
4. It pulses `start` and waits for `done`.
5. It can then start the next layer, with the outputs as the new inputs.

Each tile also reports these statistics:

- `n_pruned`, the inputs skipped;
- `n_planes`, the weight words read;
- `n_steps`, the compute steps;
- `bank_stalls`.

## Differences from the original architecture, and limits

- **Fully-connected layers only.** Convolutions would need the
  feature-map blocking scheme, which splits each channel into several blocks
  held in the buffers. Its address generation is not built. A fully-connected
  layer is the one-block case, which is what is built.
- **At most 1024 outputs per pass.** A larger layer has to be run as several
  passes, each with its own weight and output row bases. The hardware does
  not sequence those passes itself.
- **Normalization is not built** in the SFU. Only the de-quantization, ReLU,
  table-based activation and max pooling are.
- **The output buffer is not double-buffered.** Its second read port drains
  it, but the next layer cannot start its accumulation while the previous
  layer drains.
- **Vault bandwidth: 32-bit bus, not 10 GB/s.** The original gives both a
  32-bit internal vault bus and 10 GB/s per vault. At the 300 MHz logic-die
  clock those disagree (32 bit x 300 MHz = 1.2 GB/s). This design follows the
  32-bit bus, one word per cycle per vault.
- **Sizes and choices that are this design's own:**
  - the split of the SRAM budget among the buffers;
  - the DRAM row layout;
  - the flit format and XY routing;
  - the 2-entry router queues;
  - `T_RC` = 8;
  - power-of-two de-quantization scales;
  - the 64-entry activation table;
  - saturation on overflow;
  - the central PE at (0,0);
  - the placement of outputs round-robin over vaults.
- **Reduction is serial.** Partials are added as they arrive, one flit per
  cycle. There is no adder tree, and the reduction starts only after every PE
  has finished the layer.
- **Unverified circuit parameters.** No timing, area or power numbers were
  derived. The SRAM buffers are written as plain arrays. A real
  implementation would map them to memory macros.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one:

- ends by printing `TB_RESULT checks=<n> failures=<n>`;
- has a cycle watchdog;
- computes its expected values independently. For example, the quantizer is
  checked against `$ln` over all 65536 FP16 codes, and the layer tests use a
  real-number reference model.

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/qeihan_pkg.sv tb/tb_qeihan_top.sv --top-module tb_qeihan_top
./obj_dir/Vtb_qeihan_top +verilator+rand+reset+2
```

`tb_qeihan_top` runs the whole accelerator at its default size: 16 tiles,
full buffers, and no parameter overrides. It runs two layers back to back.

- **Layer A:** 640 inputs, 64 outputs, ReLU.
- **Layer B:** 192 inputs, 32 outputs, sigmoid from the table, pooling by 2.

For both layers, the test checks:

- every stored output;
- the per-tile statistics;
- the DRAM bank timing;
- that each mechanism happened at least once. The mechanisms are pruning,
  partial plane fetch, left shifts, subtraction, bank stalls, input-buffer and
  weights-buffer double buffering, ReLU clamping, table lookup and pooling.

It finishes in well under a second.

`tb_fc_workloads` runs single-pass fully-connected layers whose shapes come
from the published networks. Activations are synthetic, with a bell-shaped
spread of exponents, and weights are random. Every output is checked.

| layer | inputs/vault | groups | cycles |
|---|---|---|---|
| Transformer 512 -> 512 | 32 | 16 | 12049 |
| Transformer 2048 -> 512 | 128 | 16 | 21374 |
| BERT-Base 768 -> 768 | 48 | 24 | 20230 |
| BERT-Base 3072 -> 768 | 192 | 24 | 42351 |
| BERT-Large 1024 -> 1024 | 64 | 32 | 29353 |
| BERT-Large 4096 -> 1024 | 256 | 32 | 69952 |
| LSTM gate pass, 1504 -> 1024 | 94 | 32 | 36025 |

These numbers expose the serial reduction. Each output needs 16 partials,
and all of them enter tile (0,0) through a single router port, so the
post-processing of a layer takes at least `16 * n_out` cycles. For small
layers that exceeds the weight fetch; the 512 -> 512 layer spends about
8200 of its 12049 cycles there. A reduction spread over the mesh, or an adder
tree, would remove that floor.

The smaller testbenches cover the following:

- `tb_pe_controller` and `tb_tile` cover one tile with the mesh played by the
  testbench.
- `tb_router` covers routing, ordering and fairness under back-pressure.
- `tb_vault_controller` covers bank-parallel issue and the `T_RC` spacing.
- The rest cover one unit each.
