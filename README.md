# LightNobel accelerator in SystemVerilog

Protein structure prediction models keep a *pair representation*: one 128-value vector for
every pair of residues. Its size grows with the square of the sequence length, and it is what
stops long proteins from fitting in memory. This accelerator keeps those vectors
("tokens") quantized in memory, **one token at a time and each with its own format**. Most
values of a token are stored as 4-bit or 8-bit integers with a per-token scale. The few
largest-magnitude values (the *outliers*, a per-token count k) are kept at 16 bits together
with their channel index.

The hardware is built around that format:

* The matrix units work on 4-bit chunks. The same multipliers therefore serve 4-bit inliers,
  16-bit outliers and 16-bit weights or raw tokens.
* A token that carries outliers needs five multiplier lanes. A token without outliers needs
  four. The adder tree can be regrouped between the two cases at run time, so no lane sits idle.
* Results are quantized again on the chip before they go back to memory. A vector unit finds
  each token's top-k magnitudes, derives its scale, and packs the token into the same
  variable-length format.

The RTL implements the datapath at the sizes given for the full design:
* 32 matrix units (RMPUs), each with 4 clusters × 20 lanes × 8 PEs × 16 multipliers of 5 bits;
* 128 vector units (VVPUs) of 128 SIMD lanes;
* a global crossbar;
* the token aligner, a double-buffered token scratchpad, a weight scratchpad, an output
  scratchpad, and a controller that runs one job type from memory to memory.

## 1. The token format

All types live in `ln_pkg`. A token has `HZ = 128` channels; unquantized values and weights
are 16-bit signed fixed point with 8 fractional bits. One line holds one token:
`LINE_W = 2048` bits.

A token quantized with inlier precision `p` (4 or 8 bits) and `k` outliers (0..8) is packed
from bit 0 upward in this order:

| field | width |
|---|---|
| inlier codes, in channel order, outlier channels skipped | (128 − k) × p |
| outlier values, 16-bit raw | k × 16 |
| scale σ, 16-bit, in activation units | 16 |
| outlier channel indices, 7 bits each | k × 7 |

A token therefore takes `(128−k)·p + 23k + 16` bits. For example, 4 bits with k = 4 gives
604 bits, and 4 bits with k = 0 gives 528 bits.

An inlier is reconstructed as σ·q. An outlier needs no scale.

Quantization is symmetric per token:
* the k largest magnitudes become outliers;
* the next magnitude M sets the range;
* σ = ⌈M / qmax⌉, where qmax is 7 for 4 bits and 127 for 8 bits;
* q = round(x / σ), clamped to ±qmax.

`decode_token` in the package is the inverse of the packing. The RMPU slots use it.

## 2. Matrix unit (RMPU)

`ln_rmpu` holds 20 token slots (`ln_rda`), the engine (`ln_rmpu_engine`) and an output FIFO
(`ln_sync_fifo`). The tokens stay in the slots. Weight rows (128 × 16 bit) are broadcast, one
per accepted `row_valid/row_ready` handshake. Each row produces one result entry per row: the
row's 8-bit tag, a count, and up to 80 48-bit results.

### Chunked multiplication

A 16-bit value is split into four 4-bit chunks. The top chunk is sign-extended to 5 bits; the
lower chunks are zero-extended. Each 5-bit × 5-bit product is shifted left by the sum of the
two chunks' positions. With this rule, 16 multipliers (`ln_pe`) form a full 16 × 16 product,
and the same PE can instead form several small products.

The slot (`ln_rda`) places operands on its five 8-PE lanes as follows:

| mode | what the slot holds | how it is placed |
|---|---|---|
| `RM_QUANT` | 4-bit inliers | Inlier n sits on lanes 0..3 and meets the four chunks of weight channel c. Lane 4 takes the outliers: 4 × 4 chunk pairs per outlier, up to 8 outliers. |
| `RM_RAW` | 16-bit token | Each slot takes 32 channels. A token spreads over 4 slots. |
| `RM_QK` | 4-bit token | Multiplied with another 4-bit token. Each PE-pair sum is one 32-channel head product. |

### Regrouping the adder tree

A cluster (`ln_pe_cluster`) has 20 lanes, so it holds either five four-lane tokens or four
five-lane tokens. The arbiter (`ln_lane_arbiter`) permutes the 20 lane sums into five groups
of four.

The DAL (`ln_dal`) then works in one of two modes:
* **Four-lane mode:** each group is added and the sum is multiplied by its token's σ.
* **Five-lane mode:** groups 0..3 carry the inlier lanes of four tokens and are scaled by σ.
  Group 4 collects the four outlier lanes. Each outlier sum is added, unscaled, to its token's
  scaled inlier sum. The fifth result is unused.

The engine adds cluster results further: 10 two-input adders (8-lane sums), 5 more (16-lane
sums) and a 5-input tree (80-lane sum). A mux selects one of six output sets, followed by an
optional ReLU:

| output set | use |
|---|---|
| 320 PE-pair sums | per-head attention products |
| 20 four-lane sums | quantized tokens without outliers |
| 16 five-lane sums | quantized tokens with outliers |
| 10 eight-lane sums | wider raw sums |
| 5 sixteen-lane sums | raw 16-bit tokens, one per 4 slots |
| 1 eighty-lane sum | one dot product spread over all lanes |

The output is registered, so a result is ready one cycle after its row.

### Capacity per row

| token kind | slots used | tokens per row |
|---|---|---|
| 4-bit, no outliers | 20 | 20 |
| 4-bit with outliers | 16 (slot 5c+4 of each cluster idle) | 16 |
| raw 16-bit | 20 (4 per token) | 5 |

### Stall

A row is accepted only while the FIFO has room for the row's result plus the one still in the
engine register. Otherwise `stall` is high and the row waits.

### Units of the results

Results are in *product units*: value × weight, both fixed point, so there are 16 fractional
bits. When a result column enters a VVPU, it is shifted right by 8 and saturated to 16 bits.

## 3. Vector unit (VVPU)

`ln_vvpu` has 128 lanes (`ln_simd_lane`). A lane is a 16-bit saturating ALU with a 32-word
scratchpad.

**ALU operations:** pass, add, sub, mul, max, min, exp, relu, abs, and qnt (multiply by a
reciprocal and clamp).

**Exponent:** a two-level table (`ln_exp_lut`), exp(−a−b) = T1[a]·T2[b], with 64 entries
each. The entries are computed at elaboration:
* T1[h] = round(2¹⁵·e^(−h/4));
* T2[l] = round(2¹⁵·e^(−l/256)).

**Storage:** word t of lane j is channel j of token slot t. The crossbar delivers one output
channel for 20 token slots per cycle (a *column write*).

**Commands** (`vcmd_t`):

| command | what it does | time |
|---|---|---|
| `V_ALU` | one ALU operation in all lanes | 1 cycle |
| `V_REDUCE` | sum, mean and max over the lanes, via the SSU (`ln_ssu`) | 1 cycle |
| `V_QUANT` | quantizes one token slot into a packed line | 33 cycles for 128 lanes |

`V_QUANT` runs these steps:
1. The bitonic sorter (`ln_bitonic_topk`) orders the magnitudes and tracks their indices. It
   takes 28 compare-exchange stages, one per cycle.
2. The SSU takes M (rank k) and produces σ, qmax and a reciprocal.
3. Every lane quantizes its value.
4. The local crossbar (`ln_lcn`) moves the inlier codes to the front in channel order and the
   raw outliers behind them.
5. The SSU packs the line.

## 4. Around the units

* **`ln_token_aligner`:** a shift buffer that takes 1024-bit memory words and emits one token
  line each time enough bits have arrived for the current format. Tokens may straddle memory
  words. `flush` drops leftover bits between streams.
* **`ln_token_scratchpad`:** two banks of 512 lines (128 KB each). Writes go to one bank and
  reads come from the other; `swap` exchanges them.
* **`ln_scratchpad`:** the weight store (256 rows, 64 KB) and the output store (512 lines,
  128 KB).
* **`ln_gcn`:** the global crossbar from the 32 RMPU FIFOs to the 128 VVPUs. Each destination
  has a round-robin arbiter and takes one word per cycle. A source that loses waits with its
  FIFO head; `conflict` flags it.
* **`ln_controller`:** runs one *job* (`job_t`), a token-wise linear layer over one block of
  tokens:
  1. Load `n_rows` weight rows.
  2. Load `n_tok` packed tokens and swap banks.
  3. Fill the RMPU slots.
  4. Broadcast the rows.
  5. Drain the results into VVPU `r·VPR + vsel`.
  6. Quantize every token to `out_scheme`.
  7. Write the lines back, one per token, to `o_addr + index`.

  The job also carries the bias, ReLU and the input mode.
* **`ln_top`:** wires everything together. It exposes two memory ports, which stand for the
  off-chip memory and its controller (not part of the design):
  * a read request port (`mrd_valid/ready/addr/len`) with a word stream
    (`mem_rvalid/rready/rdata`);
  * a line write port (`mwr_valid/ready/addr/data`).

  It also exposes event counters: bank swaps, row stalls, RMPU stalls, crossbar conflicts and
  quantized tokens.

## 5. Where this design departs from the description it follows

* **Tokens with 8-bit inliers as RMPU inputs:** not supported. A quantized input token must
  have 4-bit inliers; 8-bit output is supported.
* **Attention, LayerNorm and softmax:** the controller sequences only the linear-layer job.
  The VVPU has the operations that softmax needs up to the exponent and the sum. It has no
  divide or square root, so LayerNorm and the final softmax normalisation are not possible.
* **Ganged VVPUs:** VVPUs are not combined over the crossbar for vectors wider than 128
  (the 1024-wide sequence representation).
* **No load/compute overlap:** the token scratchpad has two banks, but a job loads, then
  computes. The next block is not fetched during compute.
* **Crossbar circuit:** the swizzle switch is modelled as its function, an arbitrated crossbar,
  not as its circuit.
* **This design's own choices:** widths, latencies, the slot placement, the FIFO depth (4),
  the lane scratchpad depth (32), the memory word (1024 bits) and the scale format.

## 6. Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=… failures=…`. A reference package (`tb_ln_ref_pkg`) provides:
* the quantizer and packer;
* the dot products;
* the conversion to fixed point.

The testbenches compare against that model or against direct arithmetic. Some also check
timing:
* the sorter takes 28 cycles;
* `V_QUANT` takes 33 cycles;
* the RMPU stalls when its FIFO fills;
* the crossbar is round-robin fair.

`tb_ln_top` runs three jobs end to end:
1. five-lane mode with outliers, re-quantized with outliers;
2. four-lane mode with ReLU, re-quantized to 8 bits;
3. raw mode.

It checks every written-back line bit for bit, and it checks that every mode, ReLU clipping,
the bank swap and tokens straddling memory words each occurred.

**Largest size simulated:** 1 RMPU, 1 VVPU, a token scratchpad of 32 lines per bank,
128 weight lines and 32 output lines. The RMPU itself is at full size (20 slots, 4 clusters),
and so is the VVPU (128 lanes). The full 32-RMPU, 128-VVPU top has not been simulated. Its
lint alone needs about 13–14 GB of memory, roughly 0.4 GB per RMPU and its four VVPUs.

Run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ln_pkg.sv tb/tb_ln_ref_pkg.sv \
    tb/tb_ln_top.sv --top-module tb_ln_top
./obj_dir/Vtb_ln_top
```

Other blocks work the same way, with `tb/tb_<module>.sv` as the top.

## 7. Sizes of the workloads

The design streams tokens in blocks of up to 512 per job. The sequence length therefore only
changes how many jobs run and how much off-chip memory is needed:

| protein | residues | pair tokens | blocks of 512 |
|---|---|---|---|
| shortest test protein | 77 | 5,929 | 12 |
| longest protein used for the latency analysis | 1,410 | about 2.0 M | 3,883 |
| largest recent competition target | 6,879 | 47.3 M | 92,423 |
