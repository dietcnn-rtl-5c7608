# A look-up-only CNN inference engine (DietCNN layer engine in SystemVerilog)

A quantized CNN still multiplies: every weight times every activation, then
adds. This engine does neither. Each activation, each weight and each partial
sum is a **symbol**, the index of a centroid in a small codebook. Every
arithmetic operation is then a read from a table that was computed off line
at full precision:

* **multiply**: `p = conv_lut[a][f]`, the symbol nearest to `centroid(a) * weight_centroid(f)`;
* **add**: `s = add_lut[s][p]`, the symbol nearest to `centroid(s) + centroid(p)`;
* **activation**: `y = act_lut[x]`, the symbol nearest to `relu(centroid(x))` (or sigmoid, or any other function of one value);
* **bias**: `y = bias_lut[channel][x]`.

The network keeps the structure of the original CNN. Layers, windows and
channels are unchanged; only the arithmetic is replaced. The method is
DietCNN (S. Dey, P. Dasgupta, P. P. Chakrabarti, "DietCNN: Multiplication-free
Inference for Quantized CNNs", IJCNN 2023). Its authors implemented it with
high-level synthesis and describe the method, the tables and the codebook
sizes, but not a hardware architecture. The RTL here is one straightforward
architecture for that method. Where it follows the method and where it makes
its own choices is stated below and at the top of every source file.

## Symbols and codebooks

| codebook | symbols | bits | used for |
|---|---|---|---|
| activations (`N_CLUSTERS`) | 512 | 9 | input pixels, every feature map, every product and partial sum |
| conv filters (`N_CFILTERS`) | 256 | 8 | weights of convolution layers |
| fc filters (`N_FFILTERS`) | 32 | 5 | weights of fully-connected layers |

These are the sizes of the FPGA configuration the method was evaluated with.
Products and sums come back into the *activation* codebook. This is what lets
one add table and one activation table serve every layer: a single codebook
flows through the whole network.

The tables held on chip, at the default sizes:

| table | entries | index | source of its contents |
|---|---|---|---|
| `conv_lut` | 512 x 256 | `{act, conv_filter}` | nearest symbol to product of centroids |
| `fc_lut` | 512 x 32 | `{act, fc_filter}` | same, fc filter codebook |
| `add_lut` | 512 x 512 | `{acc, next}` | nearest symbol to sum of centroids |
| `act_lut` | 512 | `sym` | nearest symbol to f(centroid) |
| `bias_lut` | 512 ch x 512 | `{channel, sym}` | nearest symbol to centroid + bias[channel]; one layer at a time |
| centroids | 512 x 16 bit | `sym` | the activation codebook itself (signed fixed point) |

All of them are written by the host. The engine does not compute them.

## One output neuron: multiply, sort, ripple-add

This is the part that needs the most explanation.

A convolution output at channel `n`, position `(oy, ox)` needs `B = C*K*K`
products. The engine makes them one per cycle. It reads an input symbol and a
filter symbol, then looks the pair up in `conv_lut` (or `fc_lut`). The `B`
product symbols form a *bag*.

Symbolic addition is **not associative**. `add(add(a,b),c)` and
`add(a,add(b,c))` round to the nearest centroid at different points, so
different orders give different, and often distant, symbols. The method's
authors measured this. Adding the same bag in 1000 random orders gave the
"expected" symbol only about a quarter of the time, and a far symbol about
40 % of the time. Their figure of the fully-connected transformer shows the
bag sorted into ascending symbol index before the ripple add, and this engine
does exactly that. The same bag therefore always gives the same
sum, whatever the loop order, and the result matches any software model that
adds in ascending order.

**Sorting** (`symbol_sorter`) is a counting sort, because the keys are only
9 bits wide:

* *fill*: each product increments `cnt[sym]` and sets `occ[sym]`. That is one per cycle.
* *drain*: a 512-bit priority encoder finds the lowest set bit of `occ`. The
  sorter emits that symbol and decrements its count, clearing the bit when the
  count reaches zero. That is one symbol per cycle, with no scan over empty bins.

So a bag of `B` symbols costs `B` cycles in and `B` cycles out, whatever its
size relative to the codebook.

**Ripple add** (`add_lut_unit`) sets `acc = first symbol`, then computes
`acc = add_lut[{acc, next}]` for each later symbol. The accumulator is the
table's read register. Each look-up's address therefore contains the previous
result directly, and the loop runs at one symbol per cycle with a
single-cycle synchronous RAM.

**Bias**: when enabled, the final symbol goes through `bias_lut[{n, sum}]`.
Networks without bias skip this step.

Timing of one neuron, in cycles:

```
B          issue: read input + filter symbol, multiply look-up, push to sorter
3          read/multiply pipeline empties, sorter starts draining
B          drain sorted bag through the add table
1          last add result
1          bias look-up (only if bias_en)
1          write to the output feature map
```

A CONV/FC layer takes `4 + neurons*(2B + 5 + bias_en)` cycles, counted from
the `start` cycle to the `done` cycle. An activation layer takes
`7 + C*H*W` cycles. The testbenches check these formulas exactly. The engine
counts multiply look-ups (`B` per neuron) and add look-ups (`B-1` per
neuron).

## Layers

`layer_engine` runs one layer per `start`. The layer is described by a
`layer_cfg_t`: `op`, `bias_en`, `src_bank`, `C`, `H`, `W`, `N`, `K`, `S`.

* **CONV**: square `K x K` kernel, stride `S`, no padding. The output is
  `((H-K)/S+1) x ((W-K)/S+1) x N`. This matches the DietCNN VGG-11, which
  uses stride 2 in the first layer and no padding instead of pooling.
* **FC**: the same loop using `fc_lut`. Either give `C` inputs with
  `H = W = K = 1`, or flatten a `C x H x W` map with `K = H = W`.
* **ACT**: one `act_lut` look-up per symbol of a `C x H x W` map.

Loop order: `n, oy, ox` outside and `m, ky, kx` inside. Addresses come from
counters and adders. The only multipliers form `H*W`, `S*W` and `C*K*K` once
per layer, in its setup cycle.

Memory layouts:

* feature map: `addr = (m*H + y)*W + x`. Output neurons are written in the
  same channel-major order, so a layer's output is the next layer's input.
* filters: `addr = ((n*C + m)*K + ky)*K + kx`.

**Feature-map banks** (`fm_buffer`): there are two banks of 32768 symbols.
A layer reads bank `src_bank` and writes the other bank. The host alternates
`src_bank` from layer to layer. Each bank is a one-write, one-read RAM. Writes
are arbitrated as engine, then encoder, then host.

**Filter memory** (`sym_ram`): 2,359,296 x 8 bits. This holds one
512x512x3x3 layer, the largest of the DietCNN VGG-11. The host reloads it, and
the bias table, between layers.

## Encoding pixels and decoding results

`codebook_encoder` turns an input value into the index of the nearest
centroid. The codebook is built for pixel-level (1x1) patches, so the
distance is just `|x - c|`. The search is serial, one centroid per cycle: a
pixel takes 512 cycles and ties go to the lower index. Symbols are written
into the bank `enc_bank` at consecutive addresses, and `enc_restart` resets
the address. The same centroid table answers `dec_sym -> dec_val`, which
turns output symbols back into values (for example the ten class scores).

## Host protocol (top level `dietcnn_accel`)

The host is a processor outside this design. All loading uses one write bus:
`host_wr_en`, `host_wr_tgt`, `host_wr_addr` (22 bits), `host_wr_data` (16 bits).

| `host_wr_tgt` | address | data |
|---|---|---|
| `TGT_CONV_LUT` | `{act, cflt}` | symbol |
| `TGT_FC_LUT` | `{act, fflt}` | symbol |
| `TGT_ADD_LUT` | `{a, b}` | symbol |
| `TGT_ACT_LUT` | `sym` | symbol |
| `TGT_BIAS_LUT` | `{channel, sym}` | symbol |
| `TGT_CENTROID` | `sym` | signed value |
| `TGT_FILTER` | filter layout above | filter symbol |
| `TGT_FM0` / `TGT_FM1` | feature-map layout | symbol |

A typical inference:

1. Load the shared tables once.
2. Stream the image through `pix_valid/pix_ready/pix_val` into bank 0.
3. For each layer, load its filters and bias table, set `cfg`, pulse `start`
   and wait for `done`.
4. Read the last feature map with `host_rd_bank/host_rd_addr`. `host_rd_data`
   appears one cycle later.
5. Decode the result symbols.

Do not load anything while `busy` is high. An assertion in the engine flags
it.

## Does the DietCNN VGG-11 fit?

| layer | input | output | filter symbols | multiply look-ups | cycles |
|---|---|---|---|---|---|
| 1 conv s2 | 32x32x3 | 15x15x64 | 1728 | 388,800 | 864,004 |
| 2 conv | 15x15x64 | 13x13x128 | 73,728 | 12,460,032 | 25,049,860 |
| 3 conv | 13x13x128 | 11x11x256 | 294,912 | 35,684,352 | |
| 4 conv | 11x11x256 | 9x9x256 | 589,824 | 47,775,744 | |
| 5 conv | 9x9x256 | 7x7x512 | 1,179,648 | 57,802,752 | |
| 6 conv | 7x7x512 | 5x5x512 | 2,359,296 | 58,982,400 | |
| 7 conv | 5x5x512 | 3x3x512 | 2,359,296 | 21,233,664 | |
| 8 conv | 3x3x512 | 1x1x512 | 2,359,296 | 2,359,296 | 4,721,668 |
| linear | 512 | 10 | 5120 | 5,120 | 10,304 |

The rows with a cycle count were simulated at full size. The network needs at
most 30,976 feature-map symbols (32,768 per bank), 2,359,296 filter symbols
(2,359,296 held), 512 channels and 4608 symbols per bag. So it fits. Its
236,692,160 multiply look-ups agree with the method's own operation count. At
one look-up per cycle the whole network takes 474 M cycles, 4.7 s at the
100 MHz clock of the method's FPGA experiments,
plus filter reloads. That is the cost of the simplest schedule; see below.

ResNet-18 on 64x64 images does not fit: its first feature map has 65,536
symbols, and residual additions are not built. LeNet-5's layers fit, but
standard LeNet-5 pools, and pooling is not built. Its fully-connected part
(400-120-84-10, 48,000 + 10,080 + 840 multiply look-ups) runs as is and is
simulated at full size.

## Where this design departs from, or goes beyond, the method

* **Symbol width.** The codebook sizes 512/256/32 need 9/8/5 bits. The method's
  text also says symbolic weights and biases were loaded as 7-bit unsigned
  integers, which cannot hold 256 conv filter symbols or 512 activation symbols. This design
  follows the codebook sizes.
* **Schedule.** There is one multiply look-up and one add look-up in flight per
  cycle, and neurons run one after another. Fill and drain of the sorter do not
  overlap, so throughput is half the look-up rate. A faster version would
  double-buffer the sorter and run several neurons in parallel. The method
  leaves the architecture open.
* **Sorting hardware.** The ascending order comes from the method. The
  counting sort is this design's.
* **Bias tables.** The method names per-layer bias tables and their sizes.
  The `{channel, symbol}` indexing is this design's reading of them.
* **Encoder on chip.** The method codes images with a nearest-centroid search
  done in software. Here it is a serial on-chip search with 16-bit fixed-point
  centroids; the width is this design's choice.
* **Pooling** is not built. The method does not say how symbols are pooled,
  and its VGG-11 variant replaces pooling with stride and no padding.
* **Patches.** Only 1x1 (pixel-level) symbols are supported. The method
  allows larger patches but evaluates only 1x1.
* **Table contents.** Computing the tables (clustering, nearest-centroid
  products and sums) happens off line. The hardware only stores and reads
  them.

## Verification

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. Table contents come from integer formulas
in `tb/dietcnn_tb_pkg.sv`. These include an add table that is neither
commutative nor associative, so any wrong accumulation order shows up. That
package also holds a reference model of a layer: sort each bag, ripple-add,
apply bias.

| testbench | what it checks |
|---|---|
| `tb_act_lut_unit` | every activation look-up, 1-cycle latency |
| `tb_mult_lut_unit` | full conv/fc tables, random mixed look-ups |
| `tb_symbol_sorter` | bags of 1..200 and 4608 symbols come out ascending, first/last flags, B-cycle drain |
| `tb_add_lut_unit` | ripple sums of random bags, out_valid one cycle after the last symbol |
| `tb_bias_lut_unit` | 512-channel bias table |
| `tb_codebook_encoder` | nearest centroid against brute force, ties, 513-cycle latency, decode |
| `tb_sym_ram` | full-size filter memory, read-during-write |
| `tb_fm_buffer` | both banks, engine read/write in both directions, write priority |
| `tb_layer_engine` | conv (stride 1/2, 1x1, non-square), fc, activation; outputs, cycle counts, look-up counts |
| `tb_dietcnn_accel` | whole design at default sizes: encode, conv s2 + bias, ReLU, conv s1, fc, decode; counts each mechanism |
| `tb_dietcnn_workloads` | at full size: VGG-11 layers 1, 2, 8 and the linear layer, and the LeNet-5 fully-connected chain 400-120-84-10 with ReLU; look-up counts against the networks' operation counts |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dietcnn_pkg.sv tb/dietcnn_tb_pkg.sv tb/tb_dietcnn_accel.sv \
    --top-module tb_dietcnn_accel -o sim
./obj_dir/sim
```

`tb_dietcnn_accel` takes a few seconds. `tb_dietcnn_workloads` simulates
about 36 M cycles and takes about a minute.

Not verified: synthesis timing or resources on a real FPGA, and accuracy with
tables computed from a trained network. The tests use synthetic tables, which
check the data flow exactly but say nothing about network accuracy.

## Files

* `rtl/dietcnn_pkg.sv`: codebook sizes, widths, `layer_cfg_t`, write map.
* `rtl/dietcnn_accel.sv`: top level.
* `rtl/layer_engine.sv`: layer controller and datapath.
* `rtl/mult_lut_unit.sv`, `rtl/symbol_sorter.sv`, `rtl/add_lut_unit.sv`,
  `rtl/bias_lut_unit.sv`, `rtl/act_lut_unit.sv`: the look-up datapath units.
* `rtl/codebook_encoder.sv`: pixel coding and centroid table.
* `rtl/fm_buffer.sv`, `rtl/sym_ram.sv`: feature-map banks and the filter memory.
* `tb/`: testbenches, the table formulas and reference model
  (`dietcnn_tb_pkg.sv`), and host tasks (`dietcnn_host.svh`).

To change a codebook size, edit `N_CLUSTERS`, `N_CFILTERS` or `N_FFILTERS` in
the package. The units take them as parameters and their symbol widths
follow. The memory depths (`FM_DEPTH`, `FLT_DEPTH`, `MAX_CH`) are set there
too, and `HOST_AW` must stay wide enough for the largest table or memory.
