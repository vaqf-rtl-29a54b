# A binary-weight, low-bit-activation accelerator for vision transformers

A vision transformer spends nearly all of its arithmetic in matrix products. Examples are the patch
embedding, the Q/K/V, projection and MLP layers, and the two per-head
attention products. If the weights are binarized to ±1, each multiply becomes an add or a
subtract. A block of FPGA LUTs can then do far more of them per clock than the DSP
multipliers can do 16-bit multiplies. This RTL is a layer engine built on that idea. It
computes one matrix product per `start`, reading 64-bit words from off-chip
memory and writing 64-bit words back. Each layer can take one of two arithmetic paths:

* **unquantized**: 16-bit fixed-point activations and weights on a multiplier array
  (`TM x PH x TN` multipliers, 1536 at the defaults);
* **quantized**: `BQ`-bit activations (8 at the defaults) with 1-bit weights on an
  add/subtract array (`TMQ x PH x TNQ` lanes, 3072 at the defaults).

Both paths share the same tile memories, address generators and schedule. The default
parameters target DeiT-base (12 heads, 197 tokens) with 8-bit activations. This is
the "W1A8" point of the original design, which reports 24.8 frames/s at 150 MHz on a
Zynq UltraScale+ ZCU102. Layer normalization, softmax, scaling and GELU are not part of
the engine. The host does them on tensors that the engine leaves in memory.

## The layer as the engine sees it

Every layer is the product `O[M][F] = W[M][N] x I[N][F]`:

* `N` is the number of input channels;
* `M` is the number of output channels;
* `F` is the number of tokens (at most `F_MAX` = 197).

The `N` input channels are split into `NH` = 12 contiguous groups, one per head.
Head group `hd` owns channels `hd*N/NH ... (hd+1)*N/NH - 1`. The `mha` bit of the
layer decides what becomes of the per-head partial products:

* **FC layer** (`mha = 0`): the heads are summed. The result is a normal FC output, stored once.
* **attention layer** (`mha = 1`): each head keeps its own result, so the output holds
  `NH` separate `F x M` planes and the store takes `NH` times longer.

The host describes a layer with the packed struct `layer_cfg_t` (`rtl/vaqf_pkg.sv`) and
holds it stable from `start` until `done`. The struct holds:

* the sizes `N`, `M` and `F`;
* the flags `quant_in`, `quant_out`, `mha`, `conv` and `residual`;
* a right-shift amount;
* patch-embedding geometry;
* four base word addresses: input, weights, output and skip input.

## Tiles and the compute loop

A layer is cut into `MT = ceil(M/TMc)` output tiles. Each output tile is built from
`KT = N/(NH*TNc)` input-channel tiles. `TMc, TNc` is `TM, TN` for an unquantized layer
and `TMQ, TNQ` for a quantized one. One input-channel tile holds `TNc` channels from each of the `NH`
head groups, for all `F` tokens. The weight tile holds the matching `TMc x NH x TNc` weights.

The compute engine runs two loops over one tile pair: tokens `f`, then head groups `th`, stepping
`PH` = 4 heads at a time. In each clock it takes one step of `th`. That clock produces `TMc` output
channels for `PH` heads, each a `TNc`-long dot product. One tile pair therefore takes
exactly

    J_cmpt = F * ceil(NH/PH)            (197 * 3 = 591 clocks at the defaults)

and the testbenches check this number. For heads numbered past `NH` (when `PH` does not divide `NH`), the weight rows and
input rows read as zero. Results go into the output tile:

* on the first input-channel tile they overwrite the accumulators;
* after that they add to them.

In FC mode the `PH` head results are summed first and go into head row 0. The overwrite only
happens for the first head group of the first tile.

### Why TNQ is larger than TN

A 64-bit word holds `G = 4` 16-bit values or `GQ = floor(64/BQ)` quantized ones. That is 8 at
8 bits and 10 at 6 bits (60 of the 64 bits are used). Tiles are sized so that both kinds of
layer move the same number of words per head:

    TNQ = floor(TN * GQ / G)

That gives 32 at the defaults. The input tile memory is `max(TN*16, TNQ*BQ)` bits wide, and its
entries hold either format. The same storage therefore serves both kinds of layer.

## Memory words and off-chip layout

The paper says channels are packed along the memory word, but it does not give the
addresses. The formulas below are this design's own choice (all are word addresses;
`Gc` is `G` or `GQ` according to the data's format):

| tensor | address of channel `c` (or `m`) of token `f` |
|---|---|
| activations | `in_base + f*ceil(N/Gc) + c/Gc` |
| weights, 16-bit | `wgt_base + m*ceil(N/4) + c/4` |
| weights, binary | `wgt_base + m*ceil(N/GQ) + c/GQ`, bit `c mod GQ` (1 = +1, 0 = −1) |
| outputs | `out_base + (hd*F + f)*ceil(M/Go) + m/Go` (`hd` = 0 for FC) |
| skip input | same address as the output word it is added to, always 16-bit |

Within a word, value `l` occupies bits `[l*bits +: bits]`. For quantized data, lanes past
`M` are zero and the top `64 - GQ*BQ` bits are unused.

### Patch embedding as an FC layer

With `conv = 1` the input is the image itself, stored channel-planar: 16-bit pixels, 4
per word, at `in_base + ((ch*H + y)*W + x)/4`. The loader turns the strided convolution into
a matrix product, as in the original design. Token `f = fy*(W/P) + fx` is patch
`(fy, fx)`, and input channel `c = ch*P*P + py*P + px` is the pixel at offset `(py, px)` in
channel `ch`. The weight matrix is then an ordinary `M x 3P²` FC matrix in the same channel
order. The patch size `P` is given as `patch_lg = log2 P`. Each word read supplies 4 neighbouring pixels of one patch row, so the image width and `P` must be multiples of 4
pixels. The patch embedding is always an unquantized layer, and the host concatenates the [CLS] token.

## Output path: shift, skip add, saturate, pack

The output tile holds 32-bit accumulators. The store unit reads `P_OUT` tokens per clock and
turns every group of `Go` output channels into one word (`Go = G` for 16-bit output and
`GQ` for `BQ`-bit output, chosen by `quant_out`). For each value it does the following:

1. Arithmetic right shift by `shift`. The scale of the binary weights (the mean absolute
   weight) and any fixed-point rescaling are folded into this shift and into the next layer.
2. If `residual` is set, it adds the 16-bit value at the same position of the skip tensor.
   This is the transformer's skip connection, read in the same clock as the output.
   The skip tensor is the input of the preceding layer normalization, which stays 16-bit,
   so it has its own read ports (`skip_rd_*`) beside the quantized input ports.
3. Saturates to 16 or `BQ` bits.

The packing direction follows the paper. The shift-and-saturate requantization and the place of the skip add are
this design's own choice, because the paper does not say how requantization is done.

## Double buffering and the schedule

The input and weight tile memories have two slots each, and the output tile memory has two banks.
The controller (`vaqf_ctrl`) runs three schedulers at once:

* **load**: walks `(mt, kt)` and fills a free slot.
* **compute**: takes each full slot in the same order.
  * For `kt = 0` it also needs a free output bank.
  * After `kt = KT-1` it hands the bank on.
* **store**: empties each full bank.

Loading the next tile pair, computing the current one and storing the previous output tile
therefore all overlap. The loader reads inputs and weights at the same time on separate ports:

    J_in  = NH * (TNc/Gc) * ceil(F / P_IN)     = 624 clocks (W1A8 defaults)
    J_wgt = NH * (TNc/Gc) * ceil(TMc / P_WGT)  = 288 clocks
    J_out = (mha ? NH : 1) * (TMc/Go) * ceil(F / P_OUT)  = 150 clocks (FC)

The paper estimates a layer at `MT*(KT*max(J_in, J_wgt, J_cmpt) + J_cmpt) + J_out`. The schedule
here is a little better, because the computation of the last tile of an output tile overlaps the loads of the next.
Take a full 768→768 W1A8 projection layer at 197 tokens as an example:

* simulation: 40,941 clocks;
* formula: 58,998 clocks;
* time per output tile: about `KT*J_in`.

The loads are the bottleneck at this point: `J_in = 624` against `J_cmpt = 591`. This is why the input
port count `P_IN` defaults to 16. The paper does not give the port counts.

The controller exports four event counters for each layer:

* `n_overlap`: clocks where a load and a computation ran together;
* `n_st_overlap`: clocks where a store and a computation ran together;
* `n_ld_stall`: clocks where the engine waited for a load;
* `n_bank_stall`: clocks where the engine waited for a free output bank.

All memory ports are simple request/data ports. Data returns one clock after the request, with no back-pressure.
Connecting them to AXI, with its bursts and variable latency, needs a wrapper that this design does not include.

## Modules

| module | role |
|---|---|
| `vaqf_pkg` | constants, `layer_cfg_t`, packing helpers |
| `vaqf_top` | the engine: wires all of the below; memory ports and event counters |
| `vaqf_ctrl` | tile sequencing, slot/bank ownership, stall/overlap counters |
| `tile_loader` | input/weight/image address generation, word unpack into the tile memories |
| `in_tile_buf` | 2 slots × `NH` heads × `F_MAX` tokens; `P_IN` write ports, `PH`-head read |
| `wgt_tile_buf` | 2 slots × `NH` heads × `TMX` channels; all `PH x TMX` entries read per clock |
| `compute_engine` | the `f`/`th` loop, the two arithmetic arrays, head keep-or-sum |
| `dot_dsp` | `TN`-lane signed 16×16 dot product (multiplier path) |
| `dot_lut` | `TNQ`-lane add/subtract by weight bit (binary path) |
| `out_tile_buf` | 2 banks × `NH` × `F_MAX` × `TMX` 32-bit accumulators; `PH` accumulate ports, `P_OUT` read ports |
| `tile_storer` | reads a finished bank, `P_OUT` tokens per clock, through `out_packer`, to memory |
| `out_packer` | shift, skip add, saturate, pack one word |

Each file begins with a comment on its interface and timing.
Reads of the tile memories are combinational, and the arithmetic arrays are unpipelined. The design has
not been synthesized, so neither its area nor its clock frequency is known.

## Parameters

| parameter | default | origin |
|---|---|---|
| `S_PORT` | 64 | paper |
| `BQ` | 8 | paper (W1A8 design point) |
| `G`, `GQ` | 4, `floor(64/BQ)` | paper |
| `NH`, `PH` | 12, 4 | paper (PH = 4 for 8 or 12 heads) |
| `TN` | 16 | own choice: `TM*PH*TN` = 1536 roughly matches the 1564 DSPs reported |
| `TNQ` | `floor(TN*GQ/G)` = 32 | paper's rule |
| `TM`, `TMQ` | 24, 24 | own choice, multiples of `G` and `GQ` as the paper requires; the paper sets `TMQ = TM` |
| `F_MAX` | 197 | 196 patches + [CLS] |
| `P_IN`, `P_WGT`, `P_OUT` | 16, 4, 4 | own choice |
| `ACC_W` | 32 | own choice |

A layer must respect the following constraints, checked by assertions at `start`:

* `N` must be a multiple of `NH*TNc`;
* `F` must not exceed `F_MAX`;
* `conv` is only allowed on unquantized layers.

`TMc` must be a multiple of `Go`.
For DeiT-base at W1A8, every layer fits the defaults except one. In the attention×V product
the reduction runs over 197 key tokens, which the host must zero-pad to 224 (quantized) or
208 (16-bit) per head. A 6-bit build (`BQ = 6`) needs new tile sizes. The reason is that
`NH*TNQ = 480` does not divide 768 and `TMQ` must be a multiple of 10.

## How this departs from the paper

* The two parameter sets (`TM,TN` or `TMQ,TNQ`) are selected by the layer's `quant_in` bit.
  The paper's layer-time formula selects `TMQ` by the output-quantization flag instead. In the W1A8 design
  the two flags agree for every accelerated layer.
* The paper writes the 6-bit packing factor as `ceil(64/6) = 10`. This is taken as `floor(64/6) = 10`,
  which matches its remark that 60 of 64 bits are used.
* In attention mode the second operand still comes from the weight tile. When the layer is quantized
  it is therefore binary. The paper does not say how `QK^T` and attention×V, whose operands are both
  activations, are quantized.
* Tile sizes, port counts, accumulator width, memory layout, requantization and the
  handshakes are not given in the paper and are this design's choices (see above).

## Simulating

Each module has a self-checking testbench in `tb/`. Each testbench builds its own random
stimulus, compares against a reference model written in the testbench, and ends by printing
`TB_RESULT checks=N failures=M`. `tb/tb_ddr.sv` is a behavioural memory with
one-clock reads, used by the tests that talk to memory. For example:

    verilator --binary --timing --assert -Irtl -Itb rtl/vaqf_pkg.sv tb/tb_vaqf_top.sv \
        --top-module tb_vaqf_top -Mdir obj && ./obj/Vtb_vaqf_top

Two testbenches exercise the whole engine:

* `tb_vaqf_top` runs a small configuration (4 heads, 2 in parallel, `TN = TM = 8`, 13 tokens).
  * It covers an FC layer with a partial last output tile, a quantized FC layer, a quantized
    attention layer, a 16-bit layer with a skip connection, and a patch embedding.
  * It counts how often overlap, each stall, saturation, each mode and the partial tiles occurred.
  * It fails if any of them never happened.
* `tb_vaqf_full` runs the engine at its default parameters.
  * It runs one complete DeiT-base 768→768 W1A8 layer at 197 tokens and a 16-bit layer.
  * It checks every output word and the cycle counts.
  * It finishes in well under a minute.
* `tb_vaqf_w1a6` builds the engine for 6-bit activations (`BQ = 6`, so `GQ = 10`, 60 bits of
  each word used), at a reduced size: 4 heads, `TN = 8`, `TNQ = 20` and `TM = TMQ = 20`.
  It runs a quantized FC layer, a quantized attention-mode layer and a 16-bit layer.
