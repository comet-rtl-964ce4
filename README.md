# A multiplier-free CNN accelerator using offset-binary distributed arithmetic

This design runs convolutional neural networks without a single hardware
multiplier. A convolution layer is rewritten with im2col: each output value
becomes an inner product between a flattened input patch and a flattened
filter. Each inner product is computed bit-serially with distributed
arithmetic (DA). One operand vector is fed one bit-plane per clock cycle. The
bit-plane selects a pre-added combination of the other operand vector, and a
shift-accumulate register adds these combinations with the right weights.

Classic DA keeps those combinations in a stored table of 2^K entries. Here
the table is never stored. It is formed every cycle from adders and
multiplexers out of the operands that are currently loaded. That makes it a
"hardware LUT" that works for any weights and any inputs. The design uses
offset-binary coding (OBC), which halves the table: entries come in ± pairs,
so only half are built. The price of OBC is one constant correction term per
inner product. That term is merged with the layer's bias, so both cost a
single adder.

Two things can be chosen at build time:

* **Which operand is serialised.**
  * Scheme A serialises the activations (B1 bits, B1 cycles per tile) and
    builds the LUTs from the weights.
  * Scheme B serialises the weights (B2 bits, B2 cycles per tile) and builds
    the LUTs from the activations.

  With narrow weights, Scheme B finishes in fewer cycles but needs wider LUT
  adders.
* **How the LUT is built.** Four structures compute the same value with
  different adder, multiplexer and delay trade-offs: parallel, shared, split
  and hybrid.

The default build is hybrid LUTs, Scheme B, 16-bit data, K = 4 operands per
LUT and L = 4 output channels computed at once.

## 1. The arithmetic, in integers

Everything in the datapath is an exact integer. The fractional formulation
usually used for OBC-DA is rescaled so that no bit is ever dropped.

Let the serial operand be `s_i` and the parallel operand be `p_i`, for
i = 0..K-1:

* Scheme B: `s` = weights and `p` = activations.
* Scheme A: `s` = activations and `p` = weights.

Each `s_i` is an nb-bit two's-complement number, and nb can change from layer
to layer.

For bit-plane j (LSB first), the LUT delivers

```
D_j = sum_i ( bit_j(s_i) ? +p_i : -p_i )
```

This is the OBC form: every operand is either added or subtracted, and none
is left out. The shift-accumulate (SA) unit computes

```
acc = offset + sum_{j<nb-1} D_j 2^j  -  D_{nb-1} 2^(nb-1)
y   = acc / 2
```

Here `offset = -sum_i p_i + 2 * bias * 2^(nb-1)`. Working this through gives

```
y = sum_i s_i * p_i  +  bias * 2^(nb-1)
```

The two parts of that result come from:

* **The product sum.** `-sum_i p_i` is the negated address-0 entry of the
  LUT, the OBC offset term.
* **The bias term.** The bias is stored in the scale of the serial operand: a
  bias of b adds b·2^(nb-1) to the product sum. This is the usual "bias
  pre-scaled by 2^(B-1)" of OBC-DA. Software must quantise biases in that
  scale. The end-to-end testbench's reference model shows the convention.

How the SA unit (`obc_sa`) is built:

* The register works LSB-first with an arithmetic right shift per cycle.
* Each LUT value is added at bit position BMAX-1, so the right shifts never
  lose a bit.
* In the first cycle the offset is loaded instead of the fed-back register.
* In the last (sign) cycle the LUT value is subtracted.
* At the end the result is realigned by BMAX-nb+1 places. The "+1" is the
  OBC factor ½.

The published formulation halves every operand before the LUT. This design
keeps the ½ until the very end, so the result is bit-exact.

The offset-and-bias adder (`obc_offset_bias`) forms `bias·2^nb − Σp` with one
subtractor. A 2-to-1 multiplexer passes the bias only on the last tile of an
inner product, so a long inner product split over many tiles adds the bias
once.

## 2. The four hardware LUTs

A K-operand LUT is made of P = K/Q groups of Q operands; the default is
Q = 4. Each group produces its own OBC value, and an adder tree sums the
groups (`obc_lut`). In every group, operand 0 is the reference: the address
is the XOR of every other bit with its bit, and the group result is negated
when its bit is 0.

| Structure | Module | How the 2^(Q-1) ± combinations are produced |
|---|---|---|
| Parallel | `obc_lut_parallel` | All 2^(Q-1) entries are built at once. Entry 0 is the sum of all operands; every other entry is one subtractor (minus twice one operand) from an earlier entry. A multiplexer picks the entry. Highest adder count. |
| Shared | `obc_lut_shared` | Operand 1 enters the adder chain through a ± multiplexer, so the mirrored halves of the table share one set of 2^(Q-2) entries. |
| Split | `obc_lut_split` | The group is cut into two halves of Q/2. Each half builds its small table (for Q = 4: a+b and a−b, and their negatives) and picks from it directly with its own bits. One adder joins the halves. Fewer adders, more multiplexers. |
| Hybrid | `obc_lut_hybrid` | Operands are paired. Each pair has one adder and one subtractor; an XOR of the pair's two relative sign bits picks sum or difference, and the first bit of the pair picks its sign. The pair results are summed. Adder count grows linearly with Q. |

All four give identical results. Their testbenches compare each one with the
defining sum on random operands and bit-slices.

## 3. The OBC-GEMM core

`obc_gemm_core` computes one tile: L inner products of length K that share
one input patch slice. The columns are the L output channels of the current
channel group.

* **start** captures the operands, the serial width nb, the first/last-tile
  flags and a context tag into operand registers. The PISO bank (`obc_piso`)
  is loaded from them.
  * Scheme A: one PISO holds the K activations, shared by all columns.
  * Scheme B: each column has its own PISO, holding its K weights.
* **nb cycles of SA steps** follow. A new start may land in the last step
  cycle, so tiles issued every nb cycles run back to back.
* **Partial sums** of the tiles of one inner product (patch length C·KH·KW
  is usually much larger than K) are added in a per-column register after
  the SA.
* **y_valid** rises exactly nb + 2 cycles after the start of the last tile,
  for one cycle. It carries the L sums and the tag of that tile.

Serial operands must fit in nb bits (two's complement). The parallel operand
may use the full XW or WW bits.

## 4. The accelerator

```
              host write ports                     host read port
                   |                                      ^
   +---------------+------------------+                    |
   | weight RAM   bias RAM   feature RAM (read = x side, write = y side)
   +-----|-----------|---------|-----------------------^---+
         v           v         v (zero injected for    |
     theta BUF    beta BUF   x BUF  padding/patch end) |
     (ping-pong)  (ping-pong)(ping-pong)               |
         \           |         /                       |
          +---- OBC-GEMM core (L columns) -----> ReLU, shift, saturate
                     ^                                 ^
     control unit -> im2col address generator ---------+ (write address, lane)
```

`comet_top` wires the blocks in the sketch above.

### 4.1 Memories and buffers

* **Feature memory.** One memory of FM_DEPTH words of XW bits. Its read port
  serves as the input RAM and its write port as the output RAM. Each layer
  writes its output map to a region that the next layer reads. Maps are
  stored channel-major (CHW) from a base address.
* **Weight memory.** WM_DEPTH words of L·WW bits. The word for patch element
  i of channel group g sits at `wbase + g·(C·KH·KW) + i`. Lane l (bits
  `16l+15:16l` by default) holds the weight for output channel g·L+l.
  Element i is ordered (channel, kernel row, kernel column) with the column
  fastest. Lanes past the layer's last channel should be zero.
* **Bias memory.** BM_DEPTH words of L·BIW bits, one per channel group, at
  `bbase + g`.
* **Read timing.** All three memories read asynchronously, as distributed
  (slice) RAM does, and write synchronously.
* **Ping-pong buffers** (`obc_pingpong_buf`). The x buffer has K words, the
  weight buffer K words, the bias buffer 1 word. Each has a fill bank and a
  compute bank. While the core works on one tile, the next tile is read into
  the fill bank; a swap exchanges the banks.

### 4.2 The im2col address generator

`obc_addr_gen` is a hierarchy of counters. Innermost first:

| Counter | Counts |
|---|---|
| cntr0 | cycle within the tile period T = max(K, nb) |
| rd_cntr1 | tile of the patch |
| rd_cntr2 | output position (row, column), with the kernel-row/column and channel walk kept in small counters (no division) |
| rd_cntr3 | output-channel group |
| rd_cntr4 | layer |

In each tile period the generator reads K patch elements, one per cycle in
cycles 0..K-1, and fills the x and weight buffers. The bias word is fetched
with them. It injects zeros in two cases:

* past the end of the patch (C·KH·KW not a multiple of K), into both the x
  and the weight buffer;
* for the padding row and column, into the x buffer only.

When a tile has been read, carry 1 of cntr0 does three things:

* swaps the buffers;
* copies the read counters into the calculation counters;
* one cycle later, starts the core with the calculation counters as the tag.

When the core returns a result, the tag is loaded into the write counters.
The L results of that position are then written in L cycles, one lane per
cycle. Lanes past the layer's channel count are skipped. Writing must finish
before the next result arrives, so L ≤ K is required (checked by an
elaboration assertion).

Within a layer the stream is stall-free: a tile starts every T cycles. When
nb ≥ K the core is never idle. When nb < K, reading K elements takes longer
than computing, and the core waits K − nb cycles per tile.

**Stride and padding.**

* Stride S = 2 is done by stepping the input window by two.
* Padding P = 1 adds one zero row after the map and one zero column after
  each row (one-sided padding). It gives the output size
  `Ho = (H + P − KH) / S + 1`.

### 4.3 Control unit and configuration word

`obc_ctrl` holds a table of NLAYER configuration words, which the host writes
while the accelerator is idle. The word (`layer_cfg_t` in `obc_pkg`) holds:

* input height, width and channels;
* kernel height and width;
* stride-2 flag and padding flag;
* output channels;
* serial bit width nb;
* ReLU enable and requantisation shift;
* base addresses of input map, output map, weights and biases.

On start, the controller loads word 0, launches the layer, waits for the
address generator's layer-done, and goes on with the next word, for
`num_layers` layers. Each layer reads what the previous one wrote, so the
pipeline drains between layers: a few cycles plus the core latency. `done`
pulses after the last layer.

### 4.4 Output stage

`obc_post` applies the following in order:

1. optional ReLU;
2. an arithmetic right shift by the layer's shift;
3. saturation to XW bits.

The result is then stored. This is how a 48-bit accumulator result becomes
the next layer's 16-bit activation.

### 4.5 Host interface

All ports of `comet_top` are plain signals or the configuration struct.

* **While idle:**
  * `fm_we/fm_addr/fm_wdata` write the feature memory;
  * `fm_rdata` shows the word at `fm_addr` (combinational);
  * `wm_*` and `bm_*` write the weight and bias memories;
  * `cfg_*` write the configuration table.
* **To run:** pulse `start` with `num_layers` set. `busy` is high during the
  run and `done` pulses at the end.
* **While busy:** host writes are ignored.

### 4.6 Running a network

To run a network:

1. Write the input image into the feature memory.
2. Write the weights and biases into their memories, in the lane layout of
   4.1.
3. Write one configuration word per layer. Chain the layers by making each
   layer's input base equal the previous layer's output base.
4. Start, wait for done, and read back the last layer's output.

Each layer can use its own serial width nb: Scheme B weights must fit in it,
and the tile takes max(K, nb) cycles. Fully connected layers are 1×1
convolutions on a 1×1 map. Global average pooling can be written as a
convolution with the map's size, a constant weight and a shift. Softmax is
left to the host.

## 5. Parameters

| Parameter | Default | Meaning |
|---|---|---|
| K | 4 | operands per LUT, elements per tile |
| L | 4 | columns: output channels computed in parallel (≤ K) |
| Q | 4 | LUT group size (K a multiple of Q, Q even, ≥ 4) |
| TECH | LUT_HYBRID | LUT_PARALLEL, LUT_SHARED, LUT_SPLIT or LUT_HYBRID |
| SCHEME | SCHEME_B | SCHEME_A (activations serial) or SCHEME_B (weights serial) |
| XW, WW, BIW | 16 | activation, weight and bias widths |
| FM_DEPTH | 262,144 | feature-memory words |
| WM_DEPTH | 524,288 | weight words (L weights each) |
| BM_DEPTH | 1,024 | bias words (L biases each) |
| NLAYER | 16 | configuration entries |

The memory depths were chosen to hold All-CNN-C (see 7). The rest follows the
published configuration, except L and the bias width, which the description
leaves open. K·L = 16 matches the stated multiply-accumulate rate.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench, has a watchdog, and prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_obc_lut_{parallel,shared,split,hybrid}` | each LUT group against the ± sum, random operands and all bit patterns |
| `tb_obc_lut` | the default K = 4 hybrid LUT, and K = 8, 16 and 32 (two to eight groups) in all four structures |
| `tb_obc_piso`, `tb_obc_sa`, `tb_obc_offset_bias` | serialisation order, exact SA result (product sum plus pre-scaled bias) for random serial widths, offset/bias formula |
| `tb_obc_gemm_core` | five core builds (both schemes, all LUT structures, K = 8) against direct products, multi-tile sums, bias once, back-to-back tiles with changing nb, latency nb + 2 |
| `tb_obc_ram`, `tb_obc_pingpong_buf`, `tb_obc_post` | memory behaviour, bank swapping, ReLU, shift and saturation |
| `tb_obc_addr_gen` | every read address, zero flag, bias fetch, tile start and spacing, write address and layer-done, against loops in the testbench, for a strided padded layer and a plain one |
| `tb_obc_ctrl` | layer order, configuration per layer, 1 / 3 / 16 layers, done, writes ignored while busy |
| `tb_comet_top` | the whole accelerator at its default parameters, running the modified LeNet-5 described below |
| `tb_comet_top_scheme_a` | the same LeNet-5 on a build with Scheme A and split LUTs: activations serialised at 9 and 16 bits, weights of 8, 12 and 16 bits |
| `tb_allcnn_c` | the whole All-CNN-C network at default parameters (see 7), every output map compared as its layer finishes |

**What `tb_comet_top` runs.** The network is:

| Layer | Operation |
|---|---|
| conv1 | 5×5, 6 channels |
| pool1 | 3×3 stride-2 convolution with padding |
| conv2 | 5×5, 16 channels |
| pool2 | 3×3 stride-2 convolution with padding |
| GAP | a 5×5 convolution with weight 41 and shift 10 |
| FC1 | dense 16→32 |
| FC2 | dense 32→10 |

It uses a random 32×32 image and random weights, at serial widths
8/4/6/4/8/8/16. After the run it reads back every layer's output map and
compares it with an integer reference model: 43,663 checks. The run takes
219,332 cycles and under a second of simulation.

The testbench also counts each mechanism and fails if one never occurs:

* padding zeros;
* zero-filled patch tails;
* stride 2;
* multi-tile partial sums;
* prefetch while the core is busy;
* partial channel groups;
* ReLU clipping;
* saturation;
* serial-width changes;
* layer changes.

It also checks that tile starts are exactly max(K, nb) cycles apart.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert rtl/obc_pkg.sv \
    $(ls rtl/*.sv | grep -v obc_pkg) tb/tb_comet_top.sv --top-module tb_comet_top
./obj_dir/Vtb_comet_top
```

All testbenches use only `$urandom` and work on two-state simulators.

## 7. Capacity for the target networks

* **Modified LeNet-5** (32×32×1 input, as in section 6) fits easily:
  * 8,962 feature words in total;
  * 3,158 weight words;
  * 27 bias words;
  * 7 of 16 configuration entries.
* **All-CNN-C** (32×32×3) fits, worked out with unpadded 3×3 convolutions and
  this design's one-sided padding on the two stride-2 layers (spatial sizes
  32→30→28→14→12→10→5→3→3→3):
  * the largest input plus output map pair is 161,664 words of 262,144;
  * the weights need 342,216 words of 524,288 (1,368,480 weights);
  * the biases need 315 words;
  * it has 9 layers.

  `tb_allcnn_c` runs the network at default parameters. It uses 8-bit
  weights in the first and last three layers and 4-bit weights elsewhere,
  and runs global average pooling as a tenth layer: a 3×3 convolution with
  weight 114 and shift 10. The run takes 38,794,319 cycles, which is within
  a few hundred cycles of the pure tile count times the tile period, and
  about 35 seconds of Verilator time. All 9.76 million output words match
  the reference. The original network pads every 3×3 convolution on
  both sides. That two-sided padding is not supported, so its feature maps
  cannot be reproduced exactly.

## 8. Where this design departs from, or adds to, the published description

* **No ½ pre-scaling of LUT operands.** The factor ½ of OBC is applied once at
  the SA output, so results are bit-exact.
* **Bias scale.** The bias is pre-scaled by 2^(nb-1) in hardware, exactly as
  in the OBC formulation. The stored bias is therefore in the units of the
  serial operand's most significant bit.
* **One PISO in Scheme A.** The published core has L PISO units. In Scheme
  A all columns serialise the same activations, so this design shares one
  PISO among them. Scheme B has L PISOs, one per column's weights.
* **Partial sums stay in the core.** The published flow writes partial or
  final sums back to RAM. Here the tiles of one output position are summed
  in a register per column, and only the finished value is written. This
  saves memory traffic, and the result is the same.
* **Single feature memory.** The input and output RAMs are the read and write
  ports of one feature memory, so layers chain without copying.
* **Padding.** Padding zeros are injected on the read side by the address
  generator. They are not written into the output memory through a padding
  multiplexer. The result is the same, and no memory is spent on zeros.
  Padding is one row and one column after the map (P ∈ {0, 1}).
* **Output stage.** ReLU is as in the target networks. The shift-and-saturate
  requantisation is this design's own.
* **Layer boundaries.** The pipeline drains between layers. Within a layer it
  is stall-free.
* **Chosen sizes.** Field widths of the configuration word, the memory
  depths, the L lane packing of weight and bias words, and the host ports are
  all this design's own.
* **Not in hardware.** Softmax and any 2×2 average pooling or tanh of the
  original LeNet-5 are not implemented. Softmax is left to the host.
* **Fixed per build.** The Scheme and LUT structure are build-time
  parameters, not run-time modes. The serial width nb is set per layer at
  run time, from 2 bits up to the serial operand's width (16 by default); a
  tile takes max(K, nb) cycles.
