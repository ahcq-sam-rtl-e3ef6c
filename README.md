# A W4A4 accelerator for Segment Anything with hybrid, grouped and table-based quantizers

Four-bit activations cover the layers of a Segment Anything (SAM) image encoder poorly
when they use one quantizer everywhere. The activations after GELU are mostly packed
just below zero, with a long, sparse positive tail. The inputs of the linear projections
differ a lot from channel to channel. The post-Softmax attention scores range over many
orders of magnitude.

This RTL implements the integer datapath of an FPGA accelerator. That accelerator runs
such a network with 4-bit weights and 4-bit activations, and it supports three
activation quantizers without changing the multiply array:

* **Channel-aware grouping (CAG).** Input channels with similar statistics are placed
  next to each other offline. The channels then share one of four (scale, zero point)
  pairs. The hardware only needs to know where each group starts. Four groups of a
  32-bit scale and a 4-bit zero point make a 144-bit register bank, where a per-channel
  bank would need a register pair for every channel.
* **Hybrid log-uniform quantization (HLUQ)** for post-GELU activations. Small values
  get power-of-two codes (`x ≈ s1·2^-q`). Large values get uniform codes
  (`x ≈ s1 + s2·q`). The code space is split so that the top *n* bits of a code tell
  which kind it is. A power-of-two code then multiplies a weight by a **shift**, and a
  uniform code by a small **multiplier**.
* **Logarithmic nonlinear quantization (LNQ)** for attention probabilities. The
  log-then-uniform quantizer collapses into 15 thresholds. On the way back, the integer
  product `score codes × Value weights` is used directly as the address into a
  dequantization table held in block RAM.

The chip-level picture is a programmable-logic accelerator next to an embedded processor
and DDR4 memory. The processor does LayerNorm, positional encoding and embeddings in
floating point; a host streams images. Only the programmable-logic part is RTL here. Its
DRAM side is a set of plain load/read ports.

## Datapath

```
            IA buffer (8 codes/word)        weight buffer (LANES x 8 weights/word)
                    |                                   |
              MSB-label router ----------------+        |
          (shift amount | multiplier operand)  |        |
                    |                          v        v
        LANES bit-shift lanes  +  LANES multiplier lanes      (8 inputs each)
                    |   one accumulator pair per lane, per CAG group
                    v
          quantization & reorder buffer  --- channel-index table (reordering)
                    |  lane by lane, group by group
                    v
   quantization processor:
     dequantize  (CAG scales | s2*mul + s1*shift | LNQ table[page][sum])  x weight scale
     activation  (none | ReLU | GELU)      or Softmax over the tile
     quantize    (pass Q16.16 | uniform per output group | HLUQ | LNQ thresholds)
                    |
                    v
             output buffer (addressed by the reordered channel index)
```

| Module | Role |
|---|---|
| `ahcq_pkg` | widths, number formats, mode enums, `qparam_t`, `cfg_t` |
| `sdp_buffer` | simple dual-port RAM for the IA, weight, weight-scale and output buffers |
| `msb_router` | decodes each 4-bit code into shift lane and/or multiplier lane operands |
| `mult_pe_lane`, `shift_pe_lane` | one 8-input PE lane of each kind, with accumulator |
| `processing_core` | router plus `LANES` lanes of each kind |
| `reorder_buffer` | one row of accumulators per CAG group, plus the channel-index table |
| `quant_param_regs` | the four (scale, zero point) pairs, 144 bits |
| `lnq_lut` | LNQ dequantization pages, 1024 words of 32 bits each |
| `dequant_unit` | integer accumulators to Q16.16 |
| `act_unit`, `softmax_unit` | activation functions |
| `quant_arith` | the output quantizers |
| `quant_processor` | dequantization, activation and quantization with two parameter banks and the table |
| `ahcq_controller` | configuration registers and the tile sequencer |
| `ahcq_accel_top` | everything wired together |

### How an HLUQ code reaches the PEs

For label width *n* (1, 2 or 3), codes `0 … 2^(4-n)-1` are power-of-two codes. Their
top *n* bits are zero. Codes from `2^(4-n)` to 15 are uniform codes. The router looks
only at those top bits:

* **Power-of-two code** `q`: the weight goes to the bit-shift lane as `w·2^16 >> q`. The
  multiplier lane sees a zero.
* **Uniform code** `q`: the multiplier lane adds `q·w`. The shift lane adds `w·2^16`
  (a shift of zero).

This second case is the least obvious part of the design. Because the uniform branch is
`x ≈ s1 + s2·q`, every uniform element also contributes `s1·w`. Accumulating `w` in the
shift lane for those elements makes the final fusion a single expression:

```
y = s2 · Σ_mul  +  s1 · Σ_shift / 2^16
```

The shift lane uses 16 fractional bits, so codes down to `2^-15` lose nothing on the
way. The paper's equation for the split point (`β·(2^k − 1)`) does not give an integer
code boundary for `β ∈ {1/2, 1/4, 1/8}`. Its hardware description instead says that the
grid ratio follows a `2^-n` rule with MSB labels. This design follows the label rule.

### How CAG switches parameters

The reduction dimension is stored group by group: `grp_beats[g]` beats for group *g*.
The controller counts beats inside the current group. At the last beat of a group:

* the lanes finish that group's partial sum;
* the reorder buffer stores it as row *g*;
* the group counter advances.

The group counter also selects which zero point is subtracted from the codes before the
multipliers. This counter is all the hardware has to know about grouping. At drain time
the reorder buffer returns, for each output channel, one element per group. The
dequantizer multiplies each element by its own group scale and sums them. The output
quantizer does the same for the activation it produces: the group of an output channel
follows from its reordered address and three group boundaries. The CAG result is
therefore `Σ_g s_g · Σ_{k∈g} (a_k − z_g)·w_k`, exactly per group.

### Reordering

CAG assumes that the channels of a group sit next to each other in the next layer's
input. The reorder buffer therefore writes each result to `perm[tile_base + lane]`, a
channel-index table that the host loads with the grouping it found offline. Weights are
reordered to match offline. The table size (4096 entries, 12-bit addresses) is this
design's choice.

### LNQ

Going out, LNQ is a threshold count: code = the number of the 15 ascending thresholds
that the value reaches. Coming back, the `score × Value` dot product in the multiplier
lanes is saturated to 0…1023. It addresses one 1024-entry page of the table, and the
page is selected per attention layer. The table entry is already the dequantized value.
Only the per-channel Value scale is applied after it. With 100 pages of 1024 × 32 bits,
the table is the 3.2 Mb the paper quotes.

## Number formats

The paper dequantizes in floating point. This RTL uses fixed point throughout:

| Quantity | Format |
|---|---|
| scales `s_g`, `s1`, `s2`, weight scales | unsigned Q8.24 |
| reciprocal scales used to quantize | unsigned Q16.16 |
| dequantized values, LNQ table entries, thresholds | signed Q16.16, saturating |
| weights | signed 5-bit `w_q − z_w` |
| multiplier-lane accumulator | 24 bits |
| shift-lane accumulator | 40 bits, 16 fractional |

Weights are stored as `w_q − z_w`, with the per-channel zero point removed offline,
hence 5 bits. Division is multiplication by a reciprocal. For the HLUQ log branch,
`round(−log2(y/s1))` is found from the position of the leading one of `y·(1/s1)` plus
one comparison of the next 16 bits with √2. Non-positive inputs to the log branch take
the smallest log level.

GELU is `x·σ(1.702x)`, with σ from the PLAN piecewise-linear sigmoid (shifts and adds,
error below 0.02).

Softmax works in four steps over one tile of scores:

1. subtract the maximum;
2. form `2^t` as a shift times a quadratic in the fractional part (error below 0.25 %);
3. find `1/Σ` with a 33-cycle restoring divider;
4. multiply.

Attention rows are longer than one tile: 196 or 4096 keys in SAM-B. A long row is
therefore run twice over its tiles.

* **Statistics pass.** Each tile's own maximum `m` and sum `s` are merged into a running
  pair `(M, S)`: `M' = max(M, m)` and `S' = S·e^(M−M') + s·e^(m−M')`. Values pass
  through unchanged.
* **Normalizing pass.** The scores are recomputed. Each one is exponentiated against
  `M` and multiplied by `1/S`.

Register 0x1A selects the pass for each tile. Rows of up to 4096 scores are supported.

## One tile

A run computes one **tile**: `LANES` output channels of one token, or one row of
attention scores.

1. **COMPUTE:** one IA word (8 codes) and one weight word (LANES × 8 weights) per
   cycle, for `n_beats` cycles. Each cycle performs `LANES × 8` 4-bit products: 1024 at
   the default 128 lanes, which is 307 G products/s at 300 MHz.
2. **WAIT:** 4 cycles.
3. **DRAIN:** `LANES × groups` cycles. Elements go through the 5-stage quantization
   processor to the output buffer.
4. `done` pulses `n_beats + 4 + LANES·groups + 7` cycles after `start`. With Softmax it
   comes `2·LANES + 34` cycles later, because the whole tile must arrive before the first
   probability leaves. In a Softmax statistics pass it comes `2·LANES + 1` cycles later.

HLUQ and LNQ tiles always use one group.

Register map (`cfg_we/cfg_addr/cfg_wdata`, one write per clock):

| addr | field | addr | field |
|---|---|---|---|
| 0x00 | matmul mode (0 uniform/CAG, 1 HLUQ, 2 LNQ) | 0x0A | `s1` of the input (Q8.24) |
| 0x01 | `n_beats` | 0x0B | `s2` of the input (Q8.24) |
| 0x02 | input groups (1–4) | 0x0C | `1/s1` of the output (Q16.16) |
| 0x03 | input HLUQ label width *n* | 0x0D | `1/s2` of the output (Q16.16) |
| 0x04 | IA base | 0x10–0x13 | beats per input group |
| 0x05 | weight base | 0x14–0x16 | output group boundaries (addresses) |
| 0x06 | tile base (first channel) | 0x17 | output groups (1–4) |
| 0x07 | activation (0 none, 1 ReLU, 2 GELU, 3 Softmax) | 0x18 | output HLUQ *n* |
| 0x08 | output quantizer (0 Q16.16, 1 uniform, 2 HLUQ, 3 LNQ) | 0x19 | output `s1` (Q8.24) |
| 0x09 | LNQ table page | 0x1A | Softmax pass (0 whole row, 1 first statistics tile, 2 next statistics tile, 3 normalize) |
| | | 0x20–0x2E | LNQ thresholds, codes 1–15 |
| 0x40–0x43 / 0x44–0x47 | input group scale / zero point | 0x48–0x4B / 0x4C–0x4F | output group reciprocal scale / zero point |

Data ports of `ahcq_accel_top`:

* `ia_*`: codes `i` in bits `[4i+3:4i]`.
* `w_*`: lane `l`, input `i` in bits `[(8l+i)·5 +: 5]`.
* `ws_*`: weight scale per output channel.
* `perm_*`: channel-index table.
* `lut_*`: table pages.
* `out_re/out_raddr/out_rdata`: the output buffer. Each word holds a code in bits
  `[3:0]`, or a Q16.16 value.

The `ev_*` outputs pulse on the events the testbench counts.

## Sizes

| Parameter | Default | From the paper? |
|---|---|---|
| lanes | 128 | yes, INT4 parallelism |
| PE inputs | 8 | yes |
| CAG groups | 4 | yes |
| code width | 4 | yes |
| LNQ page address | 10 bits | yes, "below 10 bits" |
| table size | 100 pages = 3.2 Mb | yes, 3.2 Mb |
| IA buffer | 1024 words | own choice |
| weight buffer | 512 words = K ≤ 4096 | own choice |
| channel space / output buffer | 4096 | own choice |

The paper's clock is 300 MHz on an UltraScale+ device. The buffers hold one tile:

* Every SAM-B encoder layer fits. Its widths come from general knowledge of ViT-B, not
  from the paper: 768-wide projections, 3072-wide MLP, attention rows of 196 or 4096
  keys.
* SAM-L fits exactly.
* SAM-H's 5120-wide MLP does not fit at these defaults.

## Where this departs from the paper

* Fixed point instead of floating-point dequantization, as above.
* A second 144-bit parameter bank holds the output quantizer's groups. The paper counts
  one bank.
* The output quantizer has its own HLUQ `s1`, *n* and reciprocal scales, so a layer can
  read one HLUQ format and write another.
* Softmax rows longer than one tile need two passes over the row's tiles, so those scores
  are computed twice. Activation functions and quantizers are built from simple
  arithmetic, where the paper generates them with HLS.
* The paper keeps activations in four groups of on-chip buffers. Here the four CAG
  groups are address ranges of one output buffer, not four separate RAMs.
* The controller, the register map, the buffer depths and the tile schedule are
  inventions. The paper names a controller but does not describe one.
* The paper's 33.82 frames/s cannot be derived from 1024 products per cycle; its lanes
  must do more than what is described.
* Not built at all: the DDR4 memory and its controller, the processor-system software
  (LayerNorm, embeddings), the Ethernet host link, and the offline weight conditioning
  (ACNR). ACNR changes weights offline, not hardware.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one:

* compares against a model written independently in the testbench, usually in real or
  64-bit arithmetic;
* checks cycle counts where a latency is defined;
* has a watchdog;
* ends with a `TB_RESULT checks=… failures=…` line.

`tb_ahcq_accel_top` runs twelve tiles end to end at 8 lanes:

1. CAG input with ReLU;
2. CAG output groups;
3. HLUQ input with GELU;
4. HLUQ output;
5. LNQ table;
6. LNQ thresholds;
7. HLUQ with *n* = 3;
8. Softmax;
9. LNQ on the probabilities;
10. to 12. a two-tile Softmax row, run as two statistics tiles and one normalizing
    tile.

It counts the mechanisms and fails if any never occurred:

* group switches;
* shift-lane and multiplier-lane HLUQ elements;
* table reads;
* reordered channels;
* each activation, each quantizer and each output group;
* both HLUQ output branches;
* the two-pass Softmax.

`tb_ahcq_accel_top_full` runs the same tiles on the top at its defaults: 128 lanes,
and 96 beats = 768 input channels.
Two more testbenches run the same tiles with longer reductions at 128 lanes:

* `tb_workload_sam_b_mlp2` uses 384 beats. That is 3072 input channels, as in the second MLP layer of a ViT-B encoder.
* `tb_workload_k4096` uses 512 beats. That is 4096 input channels, which fills the weight buffer. It matches the score×Value product of 64×64-token global attention.

Each of these runs one tile of 128 outputs, not a whole layer.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal --top-module tb_ahcq_accel_top_full \
    -y rtl -y tb +libext+.sv -Irtl rtl/ahcq_pkg.sv tb/tb_ahcq_accel_top_full.sv
./obj_dir/Vtb_ahcq_accel_top_full
```

Replace the top module name to run any other testbench. The full-size run finishes in
well under a minute.
