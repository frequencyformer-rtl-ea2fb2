# FrequencyFormer tokenizer and sensor link in SystemVerilog

A camera that feeds a vision transformer usually ships every pixel to the
processor: 224 × 224 × 3 bytes, about 1.2 Mbit per frame, and on small
systems that link costs more energy than the computation. The FrequencyFormer
pipeline moves the first stage of the network next to the sensor. There, a
fixed multi-scale DCT turns the frame into 49 tokens of 24 INT8 channels
(9408 bit), and a serial link with a low-swing transmitter and an
integrating receiver carries them. This RTL implements that sensor-side
tokenizer, the digital part of the link on both ends, and a behavioural
model of the integrating receiver front-end. It follows the architecture
described in the FrequencyFormer paper; it is not the authors' code.

```
 RGB pixels ─► rgb_to_ycbcr ─► frame_buffer ─┬─► branch_block  (8×8 DCT)   ─► T1 7×7×24 ─┐
 (raster)                                     ├─► branch_block  (32×32 DCT) ─► T2 7×7×24 ─┤ cross_attention ─► T12 ─┐
                                              └─► branch_global (224² DCT)  ─► T3 1×1×24 ─┴──────────────── cross_attention ─► T_out 7×7×24
 T_out ─► csi2_tx (packet) ─► dphy_tx (lanes, serial) ─► [driver, channel, ir_frontend] ─► dphy_rx ─► csi2_rx ─► token bytes to the backbone
```

`ff_tokenizer` holds everything up to T_out. `ff_top` adds the colour
converter and both link ends. The analog driver, the wire and the receiver
front-end sit between the top's `lane_d` outputs and its `rx_lane_d` inputs;
the end-to-end testbenches close that loop with `ir_frontend`.

## Three views of the spectrum

Each branch looks at the frame at a different scale and keeps only
low-frequency coefficients, chosen by the JPEG zigzag order:

| branch | DCT size | coefficients kept (Y / Cb / Cr) | projection | tokens |
|---|---|---|---|---|
| 1 | 8 × 8 blocks (28 × 28 of them) | 14 / 5 / 5 → 24 channels | conv 4 × 4, stride 4 | 7 × 7 × 24 |
| 2 | 32 × 32 blocks (7 × 7) | 96 / 24 / 24 → 144 channels | conv 1 × 1 | 7 × 7 × 24 |
| 3 | whole 224 × 224 plane | pooled 8 × 8 grid, 14 / 5 / 5 | per-plane 28 × 28 pooling conv | 1 × 24 |

Batch normalisation before each convolution is folded into the weights and a
16-bit bias per output. Branch 3 is read as depthwise: each plane's DCT map
is pooled by its own 28 × 28 kernel down to 8 × 8 cells, and the zigzag picks
cells of that grid. `zigzag_select` computes a cell's zigzag rank with a few
additions instead of a table. The same rule serves every grid size.

## Computing a DCT without multipliers

This is the part of the design that needs the most care.

**Only what is kept is computed.** A 2-D DCT is `Y = C X Cᵀ`. If only the
first K zigzag coefficients survive, only the rows of `C` and the columns of
`Cᵀ` that reach them matter. For K = 14 on an 8 × 8 block that is 5 rows and
4 columns, so the output is a 5 × 4 tile instead of 8 × 8. `pruned_dct` takes
the needed row and column counts (r, s) per plane from the zigzag geometry:

| case | tile |
|---|---|
| 8 × 8, K = 14 | 5 × 4 |
| 8 × 8, K = 5 | 3 × 2 |
| 32 × 32, K = 96 | 13 × 14 |
| global, Y | 140 × 112 |

It then runs two passes:

1. Row stage: `Z[k][j] = Σᵢ C[k][i] · X[i][j]` for k < r.
2. Column stage: `Y[k][v] = Σⱼ Z[k][j] · C[v][j]` for v < s.

Each pass uses P multipliers. A block takes `r·N·(N/P) + r·s·(N/P) + 1`
cycles.

**Harmonic-aware precision.** Row k of the basis is stored with
`b_k = round(8 − 4k/t)` bits, never fewer than 4. t is 4, 12 and 56 for
branches 1, 2 and 3, so low harmonics keep 8 bits and high ones drop to 4.
Each row is quantised symmetrically with its own step,
`max|C[k][·]| / (2^(b_k−1) − 1)`. The pixels (level-shifted by −128) enter
row k with only their upper b_k bits, so every product is b_k × b_k bits.

The row result is requantised to b_k bits with a shift of
`b_k − 1 + log2 N`. In the column stage the smaller precision governs:
`m = min(b_k, b_v)`. The row value is truncated to m bits and the result is
requantised to INT8 with a shift of `(m−1) + (b_v−1) + log2 N − 7`. These
shifts make the outputs true INT8 DCT coefficients up to the basis scale,
which the following convolution absorbs.

**Look-up instead of multiply.** The basis is a constant. `dct_lut_rom`
computes it from the cosine formula at elaboration and stores, for every
coefficient c, the values c and 3c. Together with 0 and 2c (a shift) these
form a 4-entry sub-LUT.

`dnc_lut_mul` cuts the 8-bit operand into four 2-bit chunks. Each chunk
selects a sub-LUT entry, and the shifted entries are added. The top chunk is
the sign chunk, so its entries are 0, +c, −2c and −c. The result is an exact
signed 8 × 10-bit product from two table reads and adders.

Learned weights (the convolutions and the Q/K/V projections) use the same
multiplier. `lut_weight_sram` forms 3w once, when the weight is written, so
it stores both w and 3w.

`haq_requant` is the one requantiser used everywhere. It adds
`2^(shift−1)`, shifts arithmetically and clips to [−2^(b−1), 2^(b−1)−1].

## Fusing the scales

`cross_attention` computes `T_q + softmax((T_q W_Q)(T_kv W_K)ᵀ/√d) (T_kv W_V)`
with one head and d = 24. It runs in five steps:

1. Project Q, K and V, one element per cycle on 24 LUT multipliers, and
   requantise each projection to INT8 (`proj_shift`).
2. Form the scores as exact integer dot products.
3. Let `softmax_unit` turn each row of scores into 8-bit probabilities.
4. Accumulate the probability-weighted V rows, 24 channels wide.
5. Add the query token (`out_shift` aligned) and requantise.

The first stage lets the 49 tokens of T1 attend to the 49 of T2. The second
lets the result attend to the single global token T3.

`softmax_unit` works in fixed point:

- It subtracts the row maximum first.
- It scales the differences by `scale_mul`, an 8.8 factor that holds
  log2(e)/√d and the score quantisation.
- It takes 2^(−z) from a 16-entry table of 2^(−f/16) values plus a shift.
- It sums the terms and forms the reciprocal 2^24/sum once per row.
- Probabilities come out in UQ0.8.

A row of NK scores takes 3·NK + 2 cycles.

## The link

`csi2_tx` wraps the 1176 token bytes in one packet:

| field | size |
|---|---|
| data identifier 0x2A | 1 byte |
| word count, low byte first | 2 bytes |
| header check (XOR of the three bytes) | 1 byte |
| payload | WC bytes |
| CRC-16/CCITT of the payload (reflected 0x8408, seed 0xFFFF) | 2 bytes |

`dphy_tx` then works as follows:

- It spreads the bytes round-robin over LANES lanes.
- It starts a burst with the sync byte 0xB8 on every lane.
- It shifts the bytes out LSB first.
- It zero-pads the last group.
- It holds `hs_active` high for the burst.

On the other end, `dphy_rx` searches every lane for 0xB8, locks to the byte
boundary and hands out the bytes again in lane order. Its `active` output
stays high until the last lane group has been emitted, which happens a few
cycles after the burst ends. `csi2_rx` uses the fall of `active` to re-arm.
It checks the header and the CRC and writes the payload out by address.

`ir_frontend` (behavioural) is one lane of the analog receiver. Over the
first half of each bit it sums OSR/2 samples of the lane voltage. It then
decides with a comparator that adds Gaussian noise, and precharges in the
second half. Averaging four samples halves the noise amplitude. In its
testbench this brings the bit error rate for a swing of ±σ from about 16 %
(one sample) to about 2 %. That margin is what lets the transmitter run at a
lower swing.

## Using the design

**Deployment.** Weights are written through one bus: `w_we`, `w_sel`,
`w_addr` and `w_data`. `w_sel` (type `ff_pkg::wsel_t`) selects one of these
stores:

| store | layout |
|---|---|
| conv weights of branch 1 | `((oc·4+ky)·4+kx)·24+ic` |
| bias of branch 1 | output channel |
| conv weights of branch 2 | `oc·144+ic` |
| bias of branch 2 | output channel |
| pooling kernels of branch 3 | `(plane·28+a)·28+b` |
| biases of branch 3 | plane |
| Q, K and V matrices of each attention stage | `o·24+i` |

Weights are INT8 in `w_data[7:0]`; biases use all 16 bits. The struct
`ff_pkg::tok_cfg_t` carries the requantisation shifts and the softmax scale.

**Per frame.**

1. Pulse `frame_start`.
2. Stream the RGB pixels in raster order with `pix_valid`.
3. When the frame is stored, the tokenizer starts by itself.
4. `tok_done` marks the tokens, and the packet follows at once.

**Timing at the default size.** A 224 × 224 frame takes about 848,000 cycles
from the last pixel to the received packet. The global branch dominates: it
reads 28 pixels per cycle and still covers 140 DCT rows of 224² products for
the Y plane. A 64 × 64 frame takes 62,000 cycles.

**Sizes.** Every module takes its size as a parameter. The defaults are the
224 × 224, 24-channel configuration. The token width D_TOK = 24 is a package
constant. `IMGS` must be a multiple of 32, and each branch's read width P
must divide its DCT size (this is checked at elaboration).

## Where this design goes its own way

- **Softmax in fixed point.** The paper's softmax unit uses FP16; this one
  uses the base-2 fixed-point scheme above.
- **Residual add in the fusion.** The equations of the fusion have no
  residual term, but the architecture diagram draws an adder after each
  attention block. The adder is built.
- **Depthwise pooling in branch 3.** The text says the pooled map has
  3 channels, while the diagram labels it 8 × 8 × 24. The text was
  followed, with depthwise pooling.
- **Pruned global DCT.** Only the rows and columns of the global DCT that
  feed kept cells are computed. This is the pruning idea of branch 1
  carried over.
- **Link format.** The packet fields, the header check (XOR instead of the
  CSI-2 ECC), the sync byte and the lane order are CSI-2/D-PHY-like choices.
  The paper names the layers but not their formats.
- **Numeric details left open by the description.** These include the
  requantisation points and shifts, the rounding of b_k (ties go up),
  the single attention head and the BN folding.
- **Not built:**
  - the 48-channel tokenizer, (28, 10, 10) coefficients;
  - the 14 × 14 high-resolution mode, where branch 1 uses a 2 × 2 conv;
  - DDR operation of the receiver;
  - the analog driver;
  - the backbone network on the processor.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
an independent integer model in `tb/ff_ref_pkg.sv`. That package holds:

- the zigzag order, built by walking the path;
- the quantised DCT;
- requantisation;
- softmax;
- attention;
- complete reference models of the three branches and the tokenizer.

Cycle counts are checked where the design defines them: pruned DCT,
convolution, softmax and the CSI-2 packet length.

The end-to-end tests run the whole pipeline through the noisy channel and
the integrating receiver model:

- `tb_ff_top` uses a 64 × 64 frame and two lanes.
- `tb_ff_top_full` uses the default 224 × 224 frame and one lane.

Both compare the received tokens with the reference. Each also counts that
every mechanism happened: frame stored, tokens done, burst, lock on every
lane, header accepted, payload written, CRC good, and a CRC error detected
after a bit flipped on the wire.

Known open issue: `tb_ff_top_full` depends on the random seed.
With `+verilator+seed+7` it passes all 1187 checks. With `+verilator+seed+1`
it fails 217 of them. Every failure is a received token byte that is off by
exactly one from the reference. All mechanisms are still seen, and the smaller
tests pass. The most likely source is a rounding tie that the hardware and
the reference break differently somewhere in the full-size datapath. This has
not been traced.

To run one with Verilator 5:

```
verilator --binary --timing -y rtl -y tb rtl/ff_pkg.sv tb/ff_ref_pkg.sv \
          tb/tb_ff_top.sv --top-module tb_ff_top -o sim
./obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`.

Yosys with the slang front end reads the full design. A gate-level
synthesis of the full-size top did not finish within ten minutes; the
224 × 224 frame store with its 44 parallel read lanes dominates it. No area
figure is given here for that reason.
