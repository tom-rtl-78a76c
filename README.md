# TOM: a ternary-ROM accelerator for edge LLM inference

A ternary LLM has only three weight values: −1, 0 and +1. That makes its
weights cheap in two ways. A product is a conditional negation, so no multiplier is
needed. And most stored bits are zero, which a ROM written as logic does not have to
store at all. This design keeps every base weight of a ~2-billion-parameter model on chip
in such ROMs. The ROMs are spread over many small matrix-vector units, each with its own
adder tree, so all weights can be read in parallel every cycle and no weight ever crosses
a chip boundary.

Around that sit four things:

- a small SRAM per unit for the KV cache and for trainable low-rank (LoRA) adapters;
- a vector unit per lane for softmax, normalisation and other element-wise work;
- a global reduction tree that is the only path between lanes;
- a controller that powers up only the ROM of the layer being computed and of the next one.

This repository holds synthesizable SystemVerilog for all of it, a set of self-checking
testbenches, and an end-to-end test. That test runs a linear layer, a LoRA adapter path and
a full softmax attention on the assembled chip.

## Organisation

```
tom_top
├── tom_global_ctrl      program memory, fetch, broadcast, dependency wait
│   └── tom_power_ctrl   per-layer power enables and wake-up tracking
├── tom_reduction_tree   sum / max over the M lanes, result back to every lane
└── tom_lane  × M (16)
    ├── tom_vu           two vector buffers, local control, K-wide SFU (tom_sfu)
    └── tom_mvu  × N (10), chained
        ├── tom_rom_bank × LAYERS (30)   ternary weights as logic
        ├── tom_kv_sram                  KV cache + LoRA adapters
        └── tom_gemv_unit                K = 16 products, one adder
```

`tom_pkg` holds the shared types, the instruction word and the arithmetic helpers.

All lanes run the same instruction at the same time (SIMD). The controller issues one
instruction, waits until every lane is idle, and then issues the next. Lanes never talk to
each other. Whatever has to be combined across lanes goes through the reduction tree.

## The ROM bank (`tom_rom_bank`)

A bank of DEPTH words × WIDTH bits (default 1024 × 128, the densest geometry the design
study found) is not a cell array. It is built like this:

1. A one-hot decoder turns the address into DEPTH select lines.
2. Each output bit is the OR of the select lines of the words that hold a 1 in that bit.
3. A bit that is 0 in every word is a constant 0 and costs nothing.

Bank area therefore follows the number of one-bits, not DEPTH × WIDTH. Two choices push
that number down:

- Weights are coded `00` = 0, `01` = +1, `10` = −1, so a weight has at most one set bit.
- A synthesis tool is free to share OR terms between output bits.

The OR-plane masks are computed at elaboration time by a constant function, from
`tom_pkg::rom_weight(seed, row, col)`. That hash stands in for trained weights. About 40 %
of its weights are zero, which gives a zero-bit ratio of about 0.69. A real chip would have
a generator that writes out the model's weights in the same mask form. Only the function
needs replacing, nothing else in the RTL.

`pwr_en` models the bank's power switch and output isolation: an unpowered bank reads as all
zeros. The read is combinational.

## The matrix-vector unit (`tom_mvu`)

This is the part that takes most care to follow.

**Activation chain.** The VU streams *beats* into MVU 0. A beat holds K FP8 activations
plus a chunk index `i`, an output-row index `r`, a `last` flag and a `kvw` flag (cache
write). Each MVU registers the beat (stage A) and passes the same register on to the next
MVU. The beat therefore moves one MVU per cycle and every MVU sees every beat.

**Weights.** In stage A each MVU forms the weight-word index `w = wbase + r·len + i`. A
128-bit ROM word holds four 16-weight chunks, so:

- In linear-layer mode (`GM_FFN`) the active layer's bank is read at row `w/4`, and chunk
  `w%4` is registered.
- In attention mode (`GM_ATTN`) and adapter mode (`GM_LORA`) SRAM word `w` is read instead.
  In attention mode the word holds 16 FP8 keys or transposed values. In adapter mode its low
  32 bits hold 16 ternary codes.

A `kvw` beat addressed to this MVU (`cfg_mvu`) writes its 16 bytes to SRAM word `wbase+i`.

**Compute.** Stage B forms 16 products and their sum (`tom_gemv_unit`), then adds the sum
to a local accumulator. The accumulator restarts at `i = 0`. Partial sums never leave the
MVU. On the `last` chunk of a row, the finished sum becomes a result tagged (MVU, row).
MVU n thus computes output rows `r = 0..rows-1` of its own weight slice, and the lane's
outputs interleave as element `e = r·N + n`.

**Result chain.** Results travel back to the VU on a second chain, separate from the
activations. Each MVU has one slot register. A free slot takes the MVU's own queued result
first, otherwise the one offered from behind. Each MVU queues at most two of its own
results. The VU inserts idle cycles when a row pass is shorter than N chunks. That keeps
the chain at no more than one new result per cycle, so the queue cannot overflow. If it
ever did, `overflow` is raised and stays set.

## Numbers

- **FP8 (activations, KV cache)** is E4M3 with bias 7. The all-ones code is read as ±480
  rather than NaN. Every FP8 value is exact at 9 fraction bits, so:
  - a ternary × FP8 product is the activation shifted, negated or zero;
  - an FP8 × FP8 product is a 4×4-bit significand product, shifted.

  Both are exact at 18 fraction bits, and the shared adder adds plain integers exactly.
  The MVU accumulator is 48 bits wide.
- **Vector unit words** are signed Q16.16. Conversions:
  - Q16.16 → FP8 when activations enter the MVUs; this truncates and saturates at 448;
  - accumulator → Q16.16 (`>>> 2`, saturating) when results come back.
- **SFU** (`tom_sfu`, K lanes, combinational). Every operation saturates:
  - ADD, MUL, MAX;
  - DIV, by integer division;
  - EXP, as 2^(x·log2e) with a cubic polynomial for the fraction;
  - SQRT, digit by digit.

## Vector unit and instruction set (`tom_vu`, `tom_global_ctrl`)

The VU has two buffers of 512 entries. Each entry is K = 16 Q16.16 words.

- Buffer 1 feeds the MVUs and receives reduction-tree results.
- Buffer 0 receives MVU results and feeds the tree.
- The SFU may use either buffer.

An instruction (`tom_pkg::instr_t`) is executed by every lane:

| op | effect in every lane |
|----|----------------------|
| `LAYER l` | make `l` the active layer: ROM of `l` and `l+1` powered, rest gated |
| `GEMV mode,a,len,rows,waddr,d` | stream entries `a..a+len-1` of a buffer `rows` times into the MVUs; place the `rows·N` results from entry `d` of a buffer. `lofs` adds `LANE_ID·len` to `a`, so each lane takes its own slice of a vector every lane holds |
| `KVW a,len,waddr,mvu` | write `len` entries into the SRAM of one MVU, from word `waddr` |
| `VOP f,a,b,d,len` | `d[j] = f(a[j], b[j])`; `b` may be a broadcast scalar and may be negated |
| `VRED f,a,d,len` | sum or max of all elements of `a..a+len-1`, broadcast into entry `d` |
| `GRED f,a,d,len` | send entries to the reduction tree; the sum/max over lanes lands in buffer 1 entry `d` of every lane |
| `HALT` | stop, raise `done` |

The controller waits for all lanes to go idle between instructions. A `GEMV` in `GM_FFN`
mode also waits until its layer's banks have been powered for `WAKE` cycles. Because the
next layer is powered in advance, that wait happens only after a jump to a layer that was
not next.

A host loads the program memory (`p_*`) and the vector buffers (`h_*`), pulses `start`, and
waits for `done`.

## The reduction tree (`tom_reduction_tree`)

A binary tree over the M lanes with one register per level: log2 M = 4 cycles of latency
and one vector per cycle. It computes a saturating sum or a max and sends each result, with
its index, back to all lanes.

## Mapping a transformer onto it

- **Linear layers.** The input vector is held by every lane. Each lane streams its own
  slice (`GEMV … lofs`). Its MVUs multiply that slice by their ROM rows. `GRED ADD` adds
  the 16 partial vectors. This is the input-dimension tiling of the source design.
- **Attention.** Keys are spread over lanes and MVUs by token; values are stored
  transposed. Five steps follow:
  0. A `GEMV ATTN` of the query against the keys gives local scores, and `VRED MAX` gives
     the local maximum.
  1. `GRED MAX` gives the global maximum.
  2. `VOP ADD` with the negated scalar, then `VOP EXP`, rescales the scores.
  3. A `GEMV ATTN` of the probabilities against V^T multiplies by V locally.
  4. `GRED ADD` adds the lanes' partial outputs. The row sums of the probabilities are
     reduced the same way, and `VOP DIV` normalises.

  Every lane uses the true global maximum, so no partial output ever needs rescaling.
- **LoRA two-path execution.** The base path `W·x` comes from ROM. The adapter path
  `B·(A·x)` uses ternary A and B stored in the SRAM (`KVW`, then `GEMV LORA` twice with a
  `GRED` in between). A `VOP ADD` joins the two paths.

`tb/tb_tom_top.sv` contains exactly such programs, with reference arithmetic.

## Sizes: built against described

| | described | built (default) |
|--|--|--|
| lanes M, MVUs per lane N, width K | 16, 10, 16 | 16, 10, 16 |
| KV SRAM per MVU | 240 KB | 240 KB (15360 × 128 bit) |
| total SRAM | 37.5 MB | 37.5 MB |
| ROM bank geometry | 1024 × 128 | 1024 × 128 (`tom_rom_bank` default) |
| ROM per MVU | 3180 KB (≈ 6784 words per layer) | 30 × 64 words × 16 B = 30 KB |
| total ROM | 498.54 MB | 4.7 MB |
| layers | 30 | 30 |
| clock | 500 MHz | not timed |

The ROM is the one scaled-down part. Each bank is computed as constant logic while the
design is elaborated. Elaboration time grows with the number of stored words: about 7 s
per MVU at 64 words per layer in the slang front end. Verilator's C++ for the full chip
grows the same way. At the full 6784 words per layer, the 160 MVUs would take days to
elaborate. `ROM_DEPTH` is a parameter of `tom_mvu`, `tom_lane` and `tom_top`. Raising it
changes nothing else.

Every lane holds the same ROM contents. The hash seed depends on the MVU and the layer,
not on the lane. A real chip has different weights in every lane. Here the repeated
contents keep elaboration time down, and results remain checkable.

## Where this RTL departs from or adds to the source design

- Own choices; the source gives no details for any of these:
  - the instruction set and its encoding;
  - the MVU pipeline;
  - the result-chain protocol;
  - buffer depths;
  - the FP8 variant and the Q16.16 vector format.
- The SFU's divider, exponential and square root are written here. The source uses vendor
  library components.
- Power gating is logical only. `pwr_en` zeroes a bank's outputs, and a fixed `WAKE = 4`
  cycles models restore time. Real power switches and isolation cells come from the
  implementation flow. The source says the ROM is powered for the current layer in one
  place and for the current and next layer in another; this RTL powers both.
- The controller does not overlap instructions. The source's throughput figures assume a
  more aggressive schedule, so this RTL makes no claim about tokens per second.
- A context longer than 1024 tokens does not fit the default SRAM: 30 layers × 1280 B per
  token per layer for a 2B-class model with 5 KV heads of 128 dimensions.

## Simulating

Every block has a self-checking testbench in `tb/`, named `tb_<module>`. Each prints
`TB_RESULT checks=… failures=…`. `tb/tb_ref_pkg.sv` holds reference helpers: FP8 to
real, random FP8 codes and ternary values. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tom_pkg.sv tb/tb_ref_pkg.sv tb/tb_tom_top.sv --top-module tb_tom_top
./obj_dir/Vtb_tom_top +verilator+rand+reset+2
```

- `tb_tom_top` runs the whole chip at M = 4, N = 3, 3 layers. Its program covers:
  - a power-up stall and layer switches;
  - two linear layers;
  - a LoRA adapter path;
  - a 24-token attention with the global max, exp and normalisation.

  It checks every result and counts each mechanism.
The largest configuration simulated end to end is the one above: 4 lanes of 3 MVUs,
K = 16, 3 layers, 16 ROM words per layer and 256 SRAM words per MVU. The chip at its
default size (16 × 10 MVUs, 30 layers, 240 KB SRAM per MVU) passes verilator lint in about
90 s. Its verilator C++ model did not finish compiling within 10 minutes, however: the
combinational logic of all 4800 ROM banks ends up in the C++, and that is what takes the
time. The per-block testbenches also reduce the parameters wherever the defaults would make
the simulation slow.
