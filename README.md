# An FPGA CNN engine that generates its weights on the fly

Convolution engines on FPGAs often spend much of their time waiting for
weights from off-chip memory, especially in the late layers of a ResNet,
where the filters are large and the feature maps are small. This design
removes most of that traffic. A convolution filter is not stored as dense
weights. It is stored as a short list of real coefficients `alpha_j`, one
per binary basis vector `B_j`:

    W = sum_{j < nb} alpha_j * B_j,      nb = floor(rho * K^2)

The `B_j` are orthogonal variable spreading factor (OVSF) codes of length
K^2, and every element is +1 or -1. `rho <= 1` is the per-layer compression
ratio. A hardware weights generator (`cnn_wgen`) rebuilds the dense
weights tile by tile, next to the compute array, from the alphas held in
on-chip RAM. Meanwhile, a GEMM engine (`cnn_engine`) consumes the tiles.
The engine also has *input-selective* processing elements: when a layer has
fewer output channels than the array has PE columns, the idle PEs borrow a
neighbour's weights and take over part of its rows.

The RTL is SystemVerilog (IEEE 1800-2017). It is split into one module per
file in `rtl/`, with a self-checking testbench per module in `tb/`.

## Top level and data movement

`unzipfpga_top` joins two halves:

```
 alphas ──► alpha_buffer ─┐
                          ├─► mult array ─► adder array ─► weights_buffer (2 banks) ─┐
 OVSF FIFO ─► top reg ────┘        (cnn_wgen)                                        │
    ▲            │                                                                   ▼
    └─ aligner ◄─┘                         activations ─► input_buffer (2 banks) ─► PE array ─► output_buffer (2 banks) ─► out
```

The host-side data movers (DMA, DRAM, processor) are not part of the RTL.
Their buffer-side signals are the top's ports:

| group | ports | use |
|---|---|---|
| layer | `start`, `cfg` (`layer_cfg_t`), `busy`, `done` | `cfg` must stay stable while `busy` is high. `done` pulses after both halves have finished. |
| alphas | `a_wr_en/addr/data` | Load N_F alphas per word before `start`. |
| activations | `in_wr_en/row/data`, `in_commit`, `in_wr_ready` | Write T_R rows of T_P values, then commit. Tiles arrive in the order row tile → column tile → P-tile. |
| outputs | `out_ready`, `out_rd_en/row/col`, `out_data`, `out_release` | Read one element per cycle with 1 cycle of latency, then release the bank. |
| status | `steal`, `wgen_stall` | High while a helper PE works, or while the generator waits for a free weights bank. |

The layer is computed as a GEMM, `out[R x C] = X[R x P] * W[P x C]`:

- R counts output pixels.
- C counts output channels.
- P = N_in * K^2.

Each K x K kernel fills K^2 consecutive P positions. Loops are tiled by
T_R, T_C and T_P. The dataflow is output stationary: a T_R x T_C output tile
stays in the output buffer while all ceil(P/T_P) P-tiles are accumulated
into it. The first P-tile overwrites and the later ones add. On read-out,
the 32-bit sums are shifted right by `cfg.out_shift` and saturated to 16
bits.

All three buffers are double-buffered through the same `pingpong_ctrl`
helper. A producer commits a bank, and a consumer releases it. Weight
generation, activation loading, compute and read-out therefore overlap.
Back-pressure comes from the bank-full flags alone:

- The generator stops at a tile boundary while both weights banks are full.
- The engine waits before each P-tile until the weights tile and the
  activations tile are both present.
- At the first P-tile, the engine also waits for a free output bank.

### The layer descriptor

`layer_cfg_t` (in `unzip_pkg`) holds these fields:

- `ksq_sel`: which entry of `KSQ_LIST` is the layer's K^2.
- `nb`: the number of basis vectors.
- `n_rt`, `n_ct`, `n_pt`: the tile counts.
- `rows_last`, `cols_last`: the valid rows and columns of the last row tile and the last column tile.
- `alpha_base`: the layer's first alpha-buffer word.
- `bal_en`: enables work stealing.
- `out_shift`: the right shift applied to outputs on read-out.

## Generating weights tile by tile

### Tiling the generation

A T_P x T_C weights tile is numbered column-major, `e = c*T_P + p`. Column
`c` is therefore one output channel, and K^2 consecutive elements form one
kernel. The tile is cut into `N_SUB = ceil(T_P*T_C / M)` subtiles of M
elements.

For each subtile, the generator walks the `nb` basis vectors, one per cycle:

- Each cycle, all M elements receive `±alpha`.
- An M-wide adder array accumulates these increments.
- After the last basis vector, the adder array writes the subtile, saturated to 16 bits, into the weights buffer.

A tile therefore takes exactly `N_SUB * nb` cycles, and the testbenches check
this count. With the defaults (M = 128, T_P = 16, T_C = 48), a tile takes 6
subtiles x nb cycles.

Each M-element subtile spans `N_F = M / K^2` kernels (8 with the defaults).
Each kernel needs its own alpha, so the alpha buffer is N_F words wide. The
mapping is:

- Element `k` of a subtile uses lane `k / K^2`.
- For M < K^2, a subtile is part of a single kernel, and lane 0 serves it.

The host stores the alphas in exactly the order the generator consumes
them:

- Outer loops: column tile, then P-tile.
- Then subtile, then basis vector.
- One word per cycle, holding the N_F lanes.

So the read address only ever increments. It restarts at `alpha_base` for
every row tile, because every row tile reuses the same weights.

### Basis vectors without replicated storage

The M-bit vector that drives the multiplier signs is the current K^2-bit
basis vector repeated across the subtile:

    bit k = B_j[(k + offset) mod K^2]

Here `offset` is where the subtile starts within the kernel pattern. The
generator avoids storing one shifted copy per offset. It uses a small loop,
`ovsf_generator`:

1. The FIFO (`ovsf_fifo`) holds the layer's `nb` codes. At each `start` it
   is reloaded from a table computed at elaboration time. Element `b` of code
   `i` is `(-1)^popcount(bitrev(i) & b)`, the Walsh/OVSF tree order.
2. Each cycle, the head is popped into the *top register*. The top register
   is fanned out over the M bits, using `out[k] = top[k mod K^2]`.
3. At the same time, the popped vector passes through the *basis vector
   aligner* and goes back into the FIFO. The aligner is a fixed rotation
   wired per supported K^2: `out[b] = in[(b + M) mod K^2]`.

After `nb` cycles, each code comes round again, rotated by exactly the
amount by which the next subtile's start has moved within the kernel
pattern. No multiplexers select per-element offsets, and the FIFO only
needs K^2 x K^2 bits.

The two cases M <= K^2 and M > K^2 can be described as left shifts by
different amounts (M, or K^2 - mod(M, K^2)). Taken in a single direction,
these amounts disagree. The implemented rotation is the one the alignment
requires: the bits just sent out move to the top of the vector.

A bit of 1 means +1. The multiplier array therefore computes `vec[k] ? a : -a`
instead of multiplying. This is a conditional negation with the same result
as a multiplier.

### 3 x 3 filters

OVSF codes have power-of-two lengths. The default build supports only K^2 =
16 (`KSQ_LIST = '{16}`). 3x3 layers run as 4x4 kernels, with the extra taps
facing zero activations; this matches training a 3x3 crop of a 4x4 filter.

Several sizes can be compiled in, e.g. `KSQ_LIST = '{16, 4}`, with one
aligner rotation per size and `N_F = M / min(K^2)`. The `cnn_wgen` testbench
runs such a build.

## Input-selective PEs and work stealing

PE column `c` computes output channel `c` of the tile. It streams the T_R
rows through T_P multipliers, an adder tree and a final adder, with one row
per cycle and two pipeline stages. Its final adder reads the partial sum of
its element from the output buffer and writes it back in the same cycle.
This closes the accumulation loop through the output buffer, not through a
register in the PE.

When the last column tile has only C' < T_C channels, PEs C'..T_C-1 would
sit idle. With `bal_en` set, `engine_ctrl` turns them into helpers. The
mechanism works as follows:

- **Weight forwarding.** Every PE c > 0 has a register R. At cycle 0 of a
  P-tile, R loads the PE's own weight column. On each later cycle, it takes
  its left neighbour's R. PE c therefore sees column c - s at cycle s. The
  weights walk down the array one hop per cycle, and only neighbouring PEs
  are wired together.
- **Helper map.** The helpers are numbered from the first idle PE, h0. Helper
  `c` serves column `j = (c - h0) mod C'`, in group `g = 1 + (c - h0) div C'`.
  The helper captures column j when it passes, at cycle `d + 1`, where
  `d = c - j`. From cycle `d + 2` on, its switch selects the captured weights.
- **Shared row counters.** Each active column j has one row counter. Each
  cycle, the main PE takes row `cnt[j]`, and every helper of j already at work
  takes row `cnt[j] + g`. The counter then advances by 1 plus the number of
  working helpers. Rows are handed out in order, exactly once, to whichever
  PE is free. This is work stealing from a shared queue.
- **Correctness.** Every output element is still written by exactly one PE
  per cycle, and an assertion checks this. Results are tagged with
  (row, column), so helpers accumulate into the right place in the output
  buffer.

The run of a P-tile ends once every column's counter has passed R'. With one
active column and T_C - 1 helpers, a T_R = 64 row tile finishes in far fewer
cycles than 64. Because of the forwarding delay, helpers far from their
column start late.

`AUG_FROM` sets the first PE that has a capture register and switch. Only
such PEs can become helpers, which models enhancing only a subset of PEs.

This controller is this design's own construction: the mapping, the capture
timing and the counters. The approach it follows describes the idea and a
runtime model but no control logic, and that model's formula differs in
detail from the cycle counts here.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `T_R` | 64 | rows (output pixels) per tile |
| `T_P` | 16 | reduction depth per tile = multipliers per PE |
| `T_C` | 48 | output channels per tile = number of PEs |
| `M` | 128 | generator subtile width; must divide `T_P*T_C` |
| `KSQ_MAX`, `N_KS`, `KSQ_LIST` | 16, 1, `'{16}` | supported kernel sizes |
| `N_F` | 8 | alpha lanes, `M / min(KSQ_LIST)` |
| `A_DEPTH` | 262144 | alpha-buffer words, enough for one 512x512-channel layer at nb = 8 |
| `AUG_FROM` | 1 | first PE with a capture register and switch |

The tile sizes are chosen for a Zynq 7045-class device:

- M + T_P*T_C = 896 16-bit multipliers fits its 900 DSP slices.
- The alpha buffer (262144 x 128 bits) is larger than that device's block RAM. On the 7045, use `A_DEPTH` of 65536 or less and load alphas layer by layer.

Arithmetic widths:

- Activations, weights and alphas are 16-bit signed.
- Products and partial sums are 32 bits and wrap on overflow.
- Generated weights saturate to 16 bits.

## Where this departs from the original design

- The engine computes only OVSF layers. A network's first convolution, its
  1x1 convolutions and its classifier need dense weights, and there is no
  path here that loads dense weights into the weights buffer.
- The alphas of one layer at a time live on chip (`alpha_base` selects
  where). The original sizes the alpha buffer to hold every layer at once.
- Aligner rotation: see above. It follows the alignment requirement rather
  than the literal "M-bit shift" wording.
- Weights-buffer organisation, alpha layout, descriptor format, the
  handshakes, the output re-quantisation (`out_shift`), pipeline depths and
  all tile sizes are this design's choices.
- The work-stealing controller is original (see above). Its cycle counts do
  not follow the published runtime model.
- Activations are reloaded for every column tile; no input reuse across
  column tiles is attempted.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Reference values are computed inside the testbench independently of the
RTL. For example, the OVSF codes are built by the code-tree recursion, not
by the bit-parity formula the RTL uses.

| testbench | what it checks |
|---|---|
| `tb_ovsf_fifo`, `tb_alpha_buffer`, `tb_weights_buffer`, `tb_input_buffer`, `tb_output_buffer` | storage, ordering, bank flags, read latency, shift and saturation |
| `tb_basis_vector_aligner`, `tb_ovsf_generator` | rotations and subtile vectors for M above and below K^2, several K^2 |
| `tb_wgen_mult_array`, `tb_wgen_adder_array`, `tb_wgen_cu` | sign, lane mapping, accumulation, saturation, loop order, stalls |
| `tb_cnn_wgen` | whole generator, two M, two K^2, rho < 1, ragged edges; tile period = N_SUB*nb; back-pressure |
| `tb_pe`, `tb_pe_array` | dot products, 2-cycle latency, forwarding chain and captured weights |
| `tb_engine_ctrl` | each (row, column) issued exactly once per P-tile; weight column used by each PE = its tag; run length against an independent schedule model |
| `tb_cnn_engine` | GEMM with directly written weights; stealing on/off; stealing shortens a one-column layer |
| `tb_unzipfpga_top` | end to end at reduced size, from alphas to outputs; checks that stealing, generator stall, waits for weights/activations/output bank, ragged tiles and stealing-off layers all occur |
| `tb_unzipfpga_full` | one layer through the top with every parameter at its default |
| `tb_workload_layers` | real layer shapes at the default size: a 512->512 3x3 layer on a 7x7 map with rho = 0.125 (ResNet18/34 last stage) and SqueezeNet1.1's fire9 expand3x3 (64->256, 13x13, rho = 0.5); about a minute to build and run |

To run one of them with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/unzip_pkg.sv tb/tb_cnn_wgen.sv --top-module tb_cnn_wgen
    ./obj_dir/Vtb_cnn_wgen

The full-size testbench takes under a minute to build and run.

At the default size, logic synthesis of the whole top is very large. Both
the output buffer and the input buffer give every one of the 48 PEs its own
random-access port, which shows up as wide multiplexers. A real
implementation would bank these buffers by column.
