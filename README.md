# Transform-coded feature maps for a CNN layer

A CNN accelerator that cannot keep a whole network's activations on chip spends
much of its energy moving feature maps to and from external DRAM. Those maps are
strongly correlated across channels: at any pixel, the C values of the 1x1xC
column are far from independent. This design stores every layer output in
compressed form, the way an image codec would:

1. **Rotate.** Each 1x1xC column is projected onto its principal components
   (a CxC PCA matrix found offline from calibration data). Most of the energy
   ends up in the first few components; the last ones are almost constant.
2. **Quantize.** All components share one uniform step Delta, set by the
   component with the largest variance. Low-variance components collapse onto
   one or two levels.
3. **Entropy-code.** The levels are Huffman coded, so the many near-zero levels
   cost one or a few bits each.

The next layer undoes the steps on the way in: Huffman decode, rescale by Delta,
inverse PCA, then the ReLU. Because convolution, batch norm and the PCA rotation
are all linear, they are folded into **one** set of 8-bit weights. The forward
transform therefore costs nothing extra in the datapath. Only the inverse PCA is
an added multiply, C multipliers per layer.

The RTL implements one such layer in full: it reads a compressed input map, decodes
it once into an on-chip cache, computes the convolution at one output value per
clock, and writes the compressed output map back. Run it once per layer, with new
weights, and the output of one layer is the input of the next.

## Dataflow

```
 LOAD     ext. memory ─▶ vld_decoder ─▶ dequantizer ─▶ inv_pca ─▶ relu_requant ─▶ input_cache
          (64-bit words)  (Huffman)      (y = l·Δ)     (x = Tᵀy+μ)  (ReLU, to u8)    (H·W words of C_IN bytes)

 COMPUTE  input_cache ─▶ conv_ctrl (K×K window) ─▶ conv_engine ◀─ weight_mem (folded conv+BN+PCA)
                                                       │
                                                       ▼
                                quantizer (level = round(acc/Δ)) ─▶ vlc_encoder ─▶ ext. memory
```

`fmtc_layer` is the top. `layer_ctrl` steps it through the phases
IDLE → LOAD → COMPUTE → FLUSH → DONE:

| phase   | what happens | clocks |
|---------|--------------|--------|
| LOAD    | The compressed input map (`cfg.in_words` words from `cfg.in_base`) is decoded at one value per clock into `input_cache`. | H·W·C_IN + a few, plus read stalls |
| COMPUTE | One output value (one pixel of one output feature) per clock is computed, quantized, coded and written from `cfg.out_base` on. | (H·W + 1)·C_OUT, plus write stalls |
| FLUSH   | The pipeline drains. The last, zero-padded partial word is written. | a few |
| DONE    | `done` is high. `out_words`, `out_bits`, `load_cycles` and `compute_cycles` hold the layer's results. | |

The whole input map is decoded before any output is computed. A layer's output
can only be read back once all of it is in memory. Caching the whole map means
each input activation crosses the memory interface exactly once.

At the defaults (56x56 maps, 3x3 filters, 64 input and 64 output channels, the
64-channel ResNet-18 layers) the compute phase takes (3136+1)·64 = 200,768 clocks.
The ideal is 64·56·56 = 200,704. At 160 MHz the uncompressed output rate would be
1.28 Gbit/s: 8 bits per clock.

## Convolution sequencing (conv_ctrl)

This is the part whose timing is least obvious. Output pixels are visited
row-major. For each pixel the C_OUT filters are issued one per clock. The
K·K·C_IN window stays in a register for all of them, and `conv_engine` forms the
whole dot product in one clock (K·K·C_IN multipliers, 576 at the defaults), plus
the folded bias.

While one pixel's filters are being issued, the next pixel's window is fetched
into a shadow register. Each `input_cache` word is one whole 1x1xC_IN column, so a
fetch takes K·K reads. Positions outside the map are zero: "same" padding,
stride 1. The shadow becomes the working window at the start of the next slot.

A pixel slot lasts SLOT = max(C_OUT, K·K+1) clocks, and one prologue slot fetches
the first window. That is where the extra C_OUT clocks per layer come from. With
C_OUT < K·K+1 the engine idles for part of each slot.

Output order is pixel-major, feature-minor. The next layer's decoder therefore
receives the C values of one pixel together, which is what its inverse PCA needs.

## Stalls and back-pressure

The compute pipeline has a single enable. The encoder's `ready` is wired to the
`en` input of `conv_ctrl`, `conv_engine` and `quantizer`, and to the encoder's own
input stage. `ready` is high while the 128-bit packing buffer still has room for a
longest code word, whatever the memory does next:
fill ≤ 2·64 − MAX_LEN.

When the write channel holds `mem_wr_ready` low, the buffer fills, `ready` falls,
and every stage freezes in place. A slow memory only stretches the layer. Nothing
is dropped or recomputed.

On the load side the decoder takes words only when it has room (`mem_rd_ready`)
and decodes whenever enough bits are buffered. Read stalls simply insert idle
clocks. The decoded values flow into the cache without back-pressure.

## Number formats

All activations are unsigned 8-bit (after ReLU). Weights and PCA matrix entries
are signed 8-bit. Everything else is sized so nothing can overflow.

| stage | formula | widths |
|-------|---------|--------|
| conv_engine | acc = Σ a·w + bias | 32-bit accumulator and bias |
| quantizer | level = clamp((acc·qmul + 2^(qshift−1)) >>> qshift, −128, 127), with qmul ≈ 2^qshift/Δ | qmul 16 bits, qshift 6 bits; `sat` flags a clamp |
| vlc_encoder | code word of `level` (as an 8-bit pattern) from a 256-entry codebook | 1..16-bit code words, packed first bit = MSB of the 64-bit word |
| vld_decoder | inverse of the above | one symbol per clock |
| dequantizer | y = level·deq | deq 16 bits unsigned, y 24 bits |
| inv_pca | x[c] = Σ_k T[c][k]·y[k] + μ[c] | T 8-bit signed, x and μ 48 bits |
| relu_requant | a = clamp((x·omul + 2^(oshift−1)) >>> oshift, 0, 255) | omul 16 bits; `relu0`/`sat` flag the clamps |

All right shifts round half up. The helper `fmtc_pkg::rshift_round` gives the
exact rule.

Where the folded weights, biases, Δ and the scales come from is an offline step;
it is not part of the RTL. It consists of:
- PCA of calibration activations;
- folding batch norm and the PCA matrix into the convolution;
- choosing one Δ from the largest-variance component;
- building the Huffman code from level statistics.

`inv_pca` collects the C coefficients of a pixel, then emits one reconstructed
channel per clock (a C-wide dot product per clock) while the next pixel is being
collected. It is double-buffered.

## Huffman tables

The encoder accepts any prefix-free code with lengths 1..16. The decoder requires
a **canonical** code: the code words of each length L are consecutive integers.
For every length L = 1..16 the host writes:

- first[L]: the first code word of that length (right-aligned);
- count[L]: how many there are (0 if none);
- base[L]: the index in the symbol table of the first symbol of that length.

It also writes the symbol table itself, in canonical order. All 16 length entries
must be written, including the empty ones. The decoder compares all lengths in
parallel and takes the shortest match. `vld_err` rises if no length matches, which
means a corrupt stream or a bad table.

## Host interface

`cfg` (`fmtc_pkg::layer_cfg_t`) is held stable while the layer runs. Its fields
are: in_base, in_words, out_base (64-bit-word addresses), qmul, qshift (output
quantizer), deq (step of the *input* map), omul, oshift (activation scale).

Tables are written one entry per clock through `tab_we/tab_sel/tab_addr0/tab_addr1/tab_data`:

| `tab_sel` | addr0 | addr1 | data |
|-----------|-------|-------|------|
| TAB_WEIGHT | filter | element ((ky·K)+kx)·C_IN + c | weight [7:0] |
| TAB_BIAS | filter | – | bias [31:0] |
| TAB_VLC | symbol | – | {len[20:16], code[15:0]} |
| TAB_VLD_L | length L | – | {base[32:25], count[24:16], first[15:0]} |
| TAB_VLD_S | index | – | symbol [7:0] |
| TAB_IPCA_M | row (output channel) | column | entry [7:0] |
| TAB_IPCA_B | channel | – | μ [47:0] |

Pulse `start` for one clock in IDLE or DONE.

The memory side is two word channels of 64 bits:
- **Reads:** while `mem_rd_en` is high, the memory offers the word at
  `mem_rd_addr` with `mem_rd_valid`; the layer takes it with `mem_rd_ready`.
- **Writes:** `mem_wr_valid/addr/data` with `mem_wr_ready`.

A DRAM controller or an on-chip interconnect sits behind these.

## Verification

Every block has a self-checking testbench in `tb/`. Each computes expected results
from the formulas above, not from the RTL, and prints
`TB_RESULT checks=N failures=M`.

The end-to-end test (`tb_fmtc_layer`, 6x5 maps with 12 channels) runs two layers
back to back on one instance:
- Layer 1 reads a stream that the testbench encoded from random levels.
- Layer 2 reads layer 1's output straight from memory.

It checks:
- the cache contents, every output word, the bit count, and the clock counts
  against (H·W+1)·C_OUT;
- that each mechanism happened at least once: read stalls, write stalls, zero
  padding, quantizer saturation, ReLU and 8-bit clipping, the padded last word,
  and the longest code word.

`tb_fmtc_layer_full` runs the same test at the default parameters (56x56, 64
channels). It takes under a minute with Verilator.

External memory is a behavioural model (`tb/ddr_word_model.sv`) with random and
bursty stalls.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fmtc_pkg.sv tb/fmtc_tb_pkg.sv tb/tb_fmtc_layer.sv --top-module tb_fmtc_layer
./obj_dir/Vtb_fmtc_layer
```

Replace `tb_fmtc_layer` with any other testbench name to run it. Unit testbenches
that do not use the reference package do not need `tb/fmtc_tb_pkg.sv`, but it
does no harm.

**The test data is random, not a trained network.** The folded weights are random
bytes and carry no PCA structure, so the output levels are spread wide. The
codebook favours small levels, and with it the tests reach only about 8–13 bits
per value, *more* than uncompressed 8 bits. This verifies that the coding is
exact. It says nothing about the compression a real network gets. The paper this
design follows reports 40–60 % less memory traffic for ResNet-18 with
calibrated PCA and codes.

## Departures and limits

- **Stride 1 only**, with zero padding (K−1)/2. The stride-2 and 1x1 shortcut
  layers of ResNet-18, the 7x7 stem, pooling, residual additions and the
  classifier are not built. The design is one layer type, re-run per layer.
- **The whole input map is cached** (200,704 bytes at the defaults), not a few
  lines. Deeper ResNet-18 stages (128 to 512 channels at 28x28 to 7x7) fit by
  changing parameters, but the weight memory and the dot-product width grow
  with K·K·C_IN.
- **C_OUT extra clocks per layer** for the prologue slot that fetches the first
  window.
- The dot product is a fully parallel multiplier array. This design does not try
  to match any particular DSP count.
- The fixed-point formats, the rounding and saturation rules, the canonical-code
  requirement and the 16-bit code-length limit are this design's choices.
- Only one quantization step is used for all channels, as in the method. The
  optimal per-channel bit allocation is analysed in the theory but is not built.
- There is no clock generator, DRAM, or host processor. The layer expects a
  single clock and an active-low asynchronous reset (`rst_n`).
