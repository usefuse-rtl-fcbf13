# USEFUSE in SystemVerilog: fused convolution layers on online arithmetic

This is a synthesizable model of a CNN accelerator that runs several convolution layers
back to back on chip, one small tile at a time. It never writes the intermediate feature
maps to DRAM. Three ideas work together:

1. **Layer fusion with a uniform tile stride.** Each position of a "fusion pyramid"
   computes one output pixel of the last fused layer. That pixel's cone of dependencies is
   a tile in every earlier layer.
   - The tile stride (how far each level's tile moves between pyramid positions) is chosen
     per level, so that every level makes the same number of moves α per axis.
   - With equal move counts the levels stay in lock-step and never wait for each other,
     and the pyramid covers the whole image without skipping a pixel.
2. **Most-significant-digit-first (online) arithmetic.**
   - Multipliers and adders take and produce radix-2 signed digits {-1, 0, +1}, most
     significant first.
   - A unit can start as soon as the first digit of its operand exists. A whole
     multiply-and-add tree therefore produces its first result digit after a few cycles,
     whatever the word length.
3. **Early negative detection.** A ReLU follows every convolution, so a negative sum is
   thrown away.
   - The sum arrives most significant digit first, so its sign is often known long
     before its last digit.
   - Each pixel processor watches its own result stream. It stops (freezes) its
     multipliers and adders the moment the result is certain to be negative, and outputs
     zero.

The default configuration is the paper's main example: the first two convolution layers of
LeNet-5 fused into one two-level pyramid. The layers are 32×32×1 → 5×5 conv, 6 maps → ReLU →
2×2 max-pool → 5×5 conv, 16 maps → ReLU → 2×2 max-pool → 5×5×16.

## 1. Signed digits and the online units

### Digit encoding
A digit is a pair of bits `{p, n}` (`sd_digit_t` in `usefuse_pkg`) with value `p − n`:
- `10` is +1;
- `01` is −1;
- `00` is 0;
- `11` is never produced.

A stream of digits d1 d2 … dj is the fraction Σ d_i·2^-i. The sum of the positive digits
and the sum of the negative digits are called z⁺ and z⁻ below.

### Data formats
- Activations (image pixels and layer outputs) are **unsigned 8-bit fractions**. Feeding
  one to a multiplier MSDF is just shifting its bits out as digits in {0, 1}.
- Weights are **8-bit two's-complement fractions** in [-1, 1). They are held in parallel.

### Online multiplier (`olm`)
This is a serial-parallel multiplier with online delay δ = 2. The activation digit x_j
comes in and the weight Y is constant. The residual recurrence is

```
v   = 2·w + x_{j}·Y/4
z   = SELM(v̂)        v̂ = v truncated to 2 fractional bits (and one integer bit + sign)
      SELM: +1 if v̂ ≥ 1/2,  −1 if v̂ < −1/2,  else 0
w   = v − z
```

- The first two cycles only collect input (initialisation). After that one product digit
  leaves per cycle: the product's first digit appears two cycles after the activation's
  first digit.
- Exactly n = 8 digits are produced, then the output stays at zero until the next `start`.
  Dropping the leftover residual bounds the error by 2^-(n+1). The limit also matters
  because the digits leave the multiplier straight into an adder tree: residual digits
  must not leak into it.
- The residual is n+3 bits wide. |w| ≤ 1/2 holds at every step.

### Online adder (`ola`) and adder trees (`ola_tree`)
- The adder computes Z = (A+B)/2 with delay 2. It uses the same residual-and-selection
  scheme as the multiplier, with a 5-bit residual: v = 2w + (a+b)/8.
- Halving the sum keeps it a fraction. The result stream is exact, but one digit longer
  than the inputs.
- A tree of S = ⌈log2 NUM⌉ stages pads its inputs with zero streams to a power of two. It
  outputs SUM/2^S. Each stage adds 2 cycles of delay, and the tree adds S digits to the
  stream. This is the
  "precision growth" term in the cycle formulas below.

### Exactness
The only rounding in the whole datapath is each multiplier's n-digit truncation. Adders,
trees, detection and accumulation are all exact. So a result can be predicted bit for bit
by summing per-product reference values, and every testbench does exactly that.

## 2. Early negative detection (`end_u`)
END-U appends every incoming result digit to two registers: the positive digits to z⁺ and
the negative digits to z⁻. It terminates as soon as z⁺ < z⁻, compared as unsigned
integers.

**Why this never terminates a positive result.** Take the prefix after j digits.
- If its value is negative, it is at most −2^-j.
- The digits still to come can add at most 2^-j − 2^-D.
- So the final value is negative as well.

Conversely, a negative final value is a negative prefix at the last digit. Hence
*terminate ⇔ final sum < 0*, with no prediction error. The termination point depends on
the data; the paper's early-termination statistics come from real filters.

When END-U fires:
- the PPU (pixel processing unit) drives its clock enable low for all its multipliers and
  adders until the next window;
- its result is the ReLU output 0;
- `terminated` is raised.

Otherwise `value = z⁺ − z⁻`, the exact sum in units of 2^-n.

## 3. Pixel processing units
A PPU computes one output pixel: a K×K×N window of activations against one filter,
followed by ReLU. It holds N window processing units (one per input channel), an online
adder tree across the channels, and an END-U. Two kinds of window unit exist, chosen with
`TEMPORAL`.

- **WPU-S (`wpu_s`, spatial, design DS-1, the default).**
  - K·K multipliers run in parallel, one per window element, and their streams meet in a
    K·K-input adder tree.
  - All activation digits of the window arrive in the same cycle.
  - Latency of a PPU from the first activation digit to a final result:

    `2 + 2·S + n + S` cycles, with S = ⌈log2 K²⌉ + ⌈log2 N⌉

    This is δ_OLM + δ_OLA·(tree stages) + the n + S result digits. For LeNet-5 level 1
    (K=5, N=1) it is 25 cycles; for level 2 (N=6) it is 33.

- **WPU-T (`wpu_t`, temporal, design DS-2).**
  - One multiplier is reused for all K² products. Activation k is fed bit by bit while
    weight k is held.
  - The activation register collects the 8 product digits.
  - The finished product is then added (through a multiplexer whose other input is 0)
    into the accumulation register, while the next product is already being formed.
  - Each product costs n + 2 cycles.
  - After the last product the sum is sent on MSDF in sign-magnitude digit form, scaled
    by 2^-⌈log2 K²⌉. This is the same format as WPU-S, so the channel tree and END-U are
    shared.
  - The first output digit comes K²(n+2) + 3 cycles after `start`.

## 4. A pyramid level (`pyramid_level`)
One level is the accelerator for one convolution layer's tile. It is an array of
P = R×R rows (the output positions of the tile) by M columns (the output maps) of PPUs.

- **Input buffer (`input_buffer`).** Holds the H×H×N input tile and gives every row its
  K×K×N window.
  - In DS-1 all pixels shift left by one bit per cycle after `start`, so each window sees
    its next MSDF digit (the MSB) at the same time as all the others. After n cycles the
    tile has been consumed.
  - In DS-2 the tile stays still and the window units read parallel values.
- **Kernel buffers (`kernel_buffer`).** One per column. Each broadcasts its filter to the
  P PPUs of that column. They are loaded once per inference.
- **Activation buffer (`activation_buffer`).** Stores the R×R×M results after ReLU and
  requantisation: `min(255, value >> RQ_SHIFT)`. The default shift is 0, which means the
  fixed-point format is kept and values saturate at 255/256.
- All PPUs start together. The level is done when the last one is valid:
  - `ppu_latency + 1` cycles after `start` in DS-1;
  - earlier if every PPU terminated early.

  It reports how many PPUs terminated (`neg_count`) and accumulates how many PPU-cycles
  were spent computing (`active_cycles`).
- **Max pooling (`maxpool`).** A P×P non-overlapping max over the stored tile. It is a
  two-stage pipeline (row maxima, then column maxima), so MP = 2 cycles.

## 5. The fusion pyramid and its tile strides
The tile sizes follow from the last output backwards, applying D_in = (D_out − 1)·S + K to
every convolution and pooling layer. For LeNet-5 with one pooled output pixel per
position:

| step | tile | how |
|---|---|---|
| level-2 pool output | 1×1×16 | chosen output tile |
| level-2 conv output | 2×2×16 | (1−1)·2+2 |
| level-2 conv input = level-1 pool output | 6×6×6 | (2−1)·1+5 |
| level-1 conv output | 12×12×6 | (6−1)·2+2 |
| level-1 conv input | 16×16×1 | (12−1)·1+5 |

The tile stride of each level is chosen so that both levels move the same number of times:
- level 1 moves by ST1 = 4 pixels over the 32-pixel image: (32−16)/4 + 1 = 5 moves;
- level 2 moves by ST2 = ST1/2 = 2 over the 14-pixel pooled map: (14−6)/2 + 1 = 5 moves;
- the output moves by 1: 5 positions → the full 5×5 output.

So α = 5 and 25 pyramid positions. Neighbouring tiles overlap (level 1 recomputes 8 of
every 12 columns), which is the price of lock-step movement without synchronisation.

`usefuse_top` derives all these sizes from the layer parameters at elaboration. It stops
elaboration with an error if the chosen ST1 does not give the same α at both levels or
would skip pixels.

## 6. Control and memory
The **CCU (`ccu`)** runs one inference after `go`:
1. it reads all filter words of both layers once and steers them into the kernel buffers;
2. for each of the α×α positions, in row-major order:
   - it reads the 16×16 level-1 tile;
   - it starts level 1;
   - it waits for level-1 pooling, whose output is loaded straight into level 2's input
     buffer (the fused, on-chip hand-off);
   - it starts level 2;
   - it waits for level-2 pooling;
   - it writes the 1×1×16 result to the output map;
3. it raises `done`.

Reads go out through the **DRAM interface (`dram_interface`)**:
- requests use a valid/ready handshake, one per cycle;
- writes take priority over reads;
- memory returns read data in order, one word per response, without back-pressure;
- the interface keeps a FIFO of the tags of the reads in flight (up to 8). The tag tells
  the CCU where the returning word goes: {kind, filter/row, index/column, channel};
- an assertion flags a response with no read outstanding.

The memory holds one 8-bit word per address (16-bit addresses):

| region | base (defaults) | layout |
|---|---|---|
| image | 0 | [row][col][ch], unsigned fractions |
| level-1 filters | IFM²·C1 = 1024 | [filter][ch][ki][kj], two's complement |
| level-2 filters | 1024 + 6·25 = 1174 | [filter][ch][ki][kj] |
| output | 1174 + 16·6·25 = 3574 | [row][col][map], unsigned fractions |

### Timing of one inference
The compute time of one pyramid position runs from the level-1 `start` to the pooled
level-2 result. It is the sum of:
- level 1: its PPU latency + 1;
- level-1 pooling (2 cycles) and the hand-off of the pooled tile into level 2's input buffer;
- level 2: its PPU latency + 1;
- level-2 pooling (2 cycles).

With the default LeNet-5 sizes the PPU latencies are 25 and 33 cycles. The full-size
simulation measures 66 cycles per position. The reduced end-to-end test measures 54 cycles
per position for its sizes (3×3 kernels, latencies 22 and 25).

A closed-form estimate of the same quantity is α² × (Σ over levels of δ_OLM +
δ_OLA·(⌈log2 K²⌉ + ⌈log2 N⌉) + ⌈log2 K²⌉ + ⌈log2 N⌉ + MP) + n, taking δ_OLM = δ_OLA = 2,
MP = 2 and n = 8. For LeNet-5 this gives 25 × (19 + 28 + 8) = 1375 cycles, or 13.75 µs at
100 MHz. That estimate counts the n digit cycles only once, as if level 2 consumed level 1's
digits as they appear.

This design waits instead for level 1's complete result before starting level 2. Two
steps need whole values: max-pooling compares complete values, and requantisation
saturates them. So this design pays n + S digit cycles at each level. That is the main
reason its 66 cycles exceed 55.

Tile loading is **not** overlapped with computing. Each position also spends about 256
cycles (plus memory latency) reading its level-1 tile over the single 8-bit memory port.
A whole inference is therefore dominated by memory traffic: about 2 550 filter reads,
25 × 256 pixel reads and 400 result writes.

## 7. Top level (`usefuse_top`)
Ports:
- `clk`, `rst_n`;
- `go` / `done`;
- the memory port `mem_req_valid/ready/we/addr/wdata` and `mem_rsp_valid/data`;
- statistics:
  - `neg_terminations`: PPU runs stopped by END-U, both levels;
  - `l1_active_cycles`, `l2_active_cycles`: PPU-cycles really spent computing. Compare
    them with P·M·(latency+1) per position to see the work saved;
  - `tiles_done`: pyramid positions finished.

| parameter | default | meaning |
|---|---|---|
| `N_BITS` | 8 | activation and weight precision n |
| `IFM` | 32 | input map size |
| `C1` | 1 | input channels |
| `K1`, `M1` | 5, 6 | level-1 kernel size and maps |
| `K2`, `M2` | 5, 16 | level-2 kernel size and maps |
| `POOL` | 2 | pooling size after each level |
| `OUT_TILE` | 1 | pooled level-2 outputs per tile side |
| `ST1` | 4 | level-1 tile stride (level 2 uses ST1/POOL) |
| `RQ1`, `RQ2` | 0 | requantisation shifts of the two activation buffers |
| `TEMPORAL` | 0 | 0 = spatial WPU-S (DS-1), 1 = temporal WPU-T (DS-2) |
| `AW` | 16 | memory address width |

The array at the defaults:
- level 1: 144 × 6 PPUs of 25 multipliers;
- level 2: 4 × 16 PPUs of 6 × 25 multipliers;
- about 31 000 online multipliers in total.

## 8. What follows the paper and what is this design's own
**Follows the paper:**
- radix-2 signed digits;
- the serial-parallel online multiplier with δ = 2 and the 2-fractional-bit selection;
- WPU-S (multipliers + online adder tree);
- WPU-T (one multiplier, activation register, zero-multiplexer, accumulator, then the
  channel tree);
- the PPU (N window units, channel tree, END-U);
- END-U's z⁺ < z⁻ rule;
- the P×M PPU array with broadcast input and kernel buffers;
- an activation buffer and pooling after each level;
- the tile-size recursion and the uniform tile stride;
- the LeNet-5 example and its 16/12/6/2 tile chain;
- n = 8.

**This design's own choices:**
- the online adder's internals: the paper refers to the textbook adder; here it is a
  residual-form (A+B)/2 adder with δ = 2;
- the residual widths;
- stopping each multiplier after n digits;
- sign-magnitude recoding of the WPU-T sum;
- freezing a terminated PPU through clock enables;
- requantisation by shift-and-saturate;
- the bit-shifting input buffer;
- the whole CCU sequence and memory map;
- the DRAM request/response protocol;
- non-overlapped tile loading;
- the direct level-1 → level-2 tile hand-off, in place of the "activation buffer
  interconnect" drawn between levels but not described;
- the derived strides ST1 = 4, ST2 = 2.

**Not built:**
- pyramids deeper than two levels;
- convolution stride > 1;
- padding;
- overlapping pooling;
- skip connections.

So the paper's AlexNet, VGG-16 and ResNet-18 experiments cannot run on this top without
extending it. The DS-2 variant exists and is tested, but only when `TEMPORAL = 1`.

## 9. Verification
Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values are computed
independently in `tb_ref_pkg`: the textbook online-multiplication recurrence in real
arithmetic, then plain integer sums.

| testbench | what it checks |
|---|---|
| `tb_olm` | products against the reference recurrence and against x·Y within 2^-(n+1); first digit two cycles after start |
| `tb_ola`, `tb_ola_tree` | exact (A+B)/2 and SUM/2^S streams, delays |
| `tb_wpu_s`, `tb_wpu_t` | window sums exact, error bound, latency 10 and K²(n+2)+3 |
| `tb_end_u` | raises `terminate` right after the first digit whose prefix is negative, otherwise delivers the exact value |
| `tb_ppu` | DS-1 and DS-2 PPUs: result = max(0, sum), terminated ⇔ sum < 0, latencies, early terminations occur |
| `tb_input_buffer`, `tb_kernel_buffer`, `tb_activation_buffer`, `tb_maxpool` | against reference arrays, including the two-cycle pooling pipeline and saturation |
| `tb_pyramid_level` | a 5×5×2 → 3×3×2 level in DS-1 and DS-2: every activation, `neg_count`, `done` timing |
| `tb_dram_interface`, `tb_ccu` | tags and data under random memory stalls and latency; filter reads exactly once; tile pixels and output placement |
| `tb_usefuse_top_small`, `tb_usefuse_top_ds2` | whole inference, DS-1 and DS-2, on an 18×18 image (3×3 kernels, 2 and 3 maps, α = 3) |
| `tb_usefuse_top` | the same at the full LeNet-5 defaults |

The end-to-end tests do the following:
- They compare the output map bit for bit with a layer-by-layer reference.
- They count every mechanism and fail if any never happened or disagrees with the
  reference:
  - the early terminations, against the exact number of negative sums met by all
    positions;
  - PPU-cycles saved;
  - fused level-to-level transfers;
  - single filter reads;
  - positions, pooling results and output writes;
  - memory stalls.
- They report the compute cycles per position (54 for the reduced DS-1 test, 220 for
  DS-2).

Running a test with plain Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/usefuse_pkg.sv tb/tb_ref_pkg.sv \
          -y rtl -y tb tb/tb_ppu.sv --top-module tb_ppu -o tb_ppu
./obj_dir/tb_ppu
```

**Full-size simulation.** `tb_usefuse_top` runs one complete LeNet-5 inference with every
parameter of `usefuse_top` at its default. The array has about 31 000 online multipliers.
- Verilator needs several GB of memory and about 9–10 minutes (with `--build-jobs 3`) to
  build it.
- The simulation itself takes about 15 s.
- The run that was done checked 814 conditions with no failure:
  - the output is bit-exact;
  - 10 691 early terminations, equal to the reference count;
  - PPU-cycles: 485 631 of 561 600 used on level 1, and 46 295 of 56 000 on level 2;
  - 25 positions at 66 compute cycles each.

Its optional `SEED` parameter changes the random image, weights and memory timing.

**Known tool remarks.**
- Lint reports unused signals:
  - the unused input set of the PPU (DS-1 or DS-2);
  - the clock of a one-input adder tree;
  - the DRAM interface's `idle` in the top.
- It also reports that `rst_n` is used both as an asynchronous reset and, inside an
  assertion's `disable iff`, synchronously.

None of these is a circuit problem.
