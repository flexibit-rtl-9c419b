# FlexiBit — a bit-parallel accelerator for arbitrary FP and INT precisions

FlexiBit multiplies and accumulates numbers of any width and format (FP4 … FP16 with any
exponent/mantissa split, INT2 … INT16, and microscaling "MX" blocks with a shared exponent)
without wasting hardware on the bits a narrow format does not use. Operands are stored
*bit-packed*: a 24-bit register holds as many back-to-back elements as fit, e.g. four FP6 values.
Inside each processing element (PE) the register is split into packed sign, exponent and mantissa
fields. Every mantissa bit pair then gives one AND "primitive", and a reduction network assembles
the primitives into products. Because every resource is indexed by bits rather than by elements,
a narrower format gives more products per cycle rather than idle lanes.

The RTL implements one PE, an array of PEs on a 2-D bus network, and the supporting parts around
it. Those parts are the off-chip bit-packing unit, the global buffers, the CSRs, a tile controller
and the output unpacking unit.

## Number formats

* An element is laid out LSB first: sign, then exponent, then mantissa.
* FP formats have an implicit leading one and use the usual bias 2^(E-1)-1.
* An all-zero exponent and mantissa means zero. There are no subnormals, infinities or NaNs.
* INT formats are sign-magnitude. In INT mode the exponent path is bypassed.
* In MX mode, each operand block carries an E8M0 shared scale (bias 127). That scale is applied
  when a result leaves the PE.

## The processing element (`fb_pe`)

The PE computes an outer product. Its activation register holds `na` elements and its weight
register holds `nw` elements. Each step produces `na·nw` products (at most 36). Product
`p = w·na + a` is added into its own accumulator, so the array is output stationary. The stages
are:

* **Separator** (`fb_separator`). Running per-element bit counters route each bit of the packed
  24-bit register into packed sign (12 bits), exponent (12) and mantissa (12) registers.
* **Primitive generator** (`fb_prim_gen`). Forms `a_i & w_j` for every mantissa bit pair of every
  product and packs them product-major into a 144-bit primitive register.
* **FBRT** (`fb_fbrt`, flexible-bit reduction tree). Reduces each product's primitives to its
  mantissa product.
* **Implicit-one correction** (`fb_implicit_one`). Adds the terms that the implicit ones
  contribute: `(a_m << mw) + (w_m << ma) + (1 << (ma+mw))`. This avoids generating primitives
  for them.
* **FBEA** (`fb_fbea`, flexible-bit exponent adder). A 144-bit carry chain. A control bit at each
  position can break the carry, so one adder performs many exponent additions of any width side by
  side.
* **ENU** (`fb_enu`, exponent normalization unit). Compares each product's exponent with its
  accumulator's exponent and works out which side shifts and by how much.
* **CST** (`fb_cst`, concat-shift tree). Aligns the product mantissa and the accumulator mantissa.
* **ANU** (`fb_anu`, accumulation and normalization unit). Adds or subtracts the aligned values,
  finds the leading one and renormalises. Each accumulator holds a sign, a 12-bit signed exponent
  and a 32-bit magnitude. INT results saturate.
* **Output conversion** (`fb_out_conv`). Removes the input biases, adds the output bias and the
  two MX scales (`scale_a-127 + scale_w-127`), and rounds the accumulator toward zero into the
  output format. Overflow saturates and underflow flushes to zero.
* **Local buffer** (`fb_local_buffer`). 30 activation registers and 30 weight registers of
  24 bits each, 180 bytes in total. This holds the K dimension of a tile.

There are two pipeline registers between reading the local buffer and the accumulators.
`fb_cfg_decode` turns the layer format into the control word:

* `ma`, `mw`, `mo` mantissa widths;
* `na`, `nw` element counts, limited by the sign, exponent and mantissa register widths, by the
  144-bit primitive and adder widths, and by the 36-product limit;
* the FBEA segment width `max(ea,ew)+1` and its carry-break vector.

## Accelerator (`flexibit_top`)

* **CSRs** (`fb_csr`). A 32-bit register file, addressed by word:

  | Word | Name | Contents |
  |---|---|---|
  | 0 | FORMAT | `pa`/`ea`/`pw`/`ew`/`po`/`eo` total and exponent widths, `int_mode`, `mx_en` |
  | 1 | SCALE | the two MX scales |
  | 2 | TILE_K | tile depth K (at most 30) |
  | 3 | LOAD | selects the stream destination (activations or weights) and its container width, and restarts the packer |
  | 4 | CMD | start |
  | 5 | STATUS | busy, tiles done, elements packed |

* **Bit-packing unit** (`fb_bpu`). Takes 64-bit off-chip words of zero-padded 8- or 16-bit
  containers and packs the payload bits densely.
  * Output bit `j` of input bit `i` is `j = start + i − ⌊i/C⌋·(C − p)`, where `C` is the container
    width and `p` is the precision.
  * The output word is double buffered. The unit stalls for one cycle when both halves are full.
* **Global buffers** (`fb_sram`). Weight and activation SRAMs of 64-bit words: 2 MB and 1 MB, as in
  Mobile-A.
* **Bus network** (`fb_bus_reader`). Reads a packed stream back out of a buffer as 24-bit register
  chunks. Row buses carry activation registers to a row of PEs. Column buses carry weight
  registers to a column.
* **Controller** (`fb_controller`). Runs one output-stationary tile, `M = X·na` by `N = Y·nw` over
  `K` steps, in these phases:
  1. LOAD: fill every local buffer over the buses;
  2. COMP: K steps, with the accumulators cleared on the first;
  3. WAIT: let the pipeline empty;
  4. DRAIN: stream the outputs out in row-major order;
  5. DONE.
* **Unpacking unit** (`fb_unpack`). Puts output elements back into zero-padded 8- or 16-bit
  containers on a 64-bit valid/ready stream.

To run a tile, the host:

1. writes FORMAT, SCALE and TILE_K;
2. writes LOAD for activations, then streams them in;
3. writes LOAD for weights, then streams them in;
4. writes CMD to start the tile;
5. reads the results from the output stream.

## Where this RTL departs from the paper

* **Array size.** The default PE array is 8×8, not Mobile-A's 32×32 (1K PEs). `X` and `Y` are
  parameters, so the full size is `flexibit_top #(.X(32), .Y(32))`. The array was reduced only
  because elaborating and synthesising 1024 flattened PEs takes hours. The buffers keep the
  Mobile-A sizes.
* **FBRT and CST.** Both are written as functional shift-and-add and shift logic for each product.
  They give the same results as the paper's concat/shift/add trees but do not copy the tree
  structure.
* **FBEA segments.** Segments are one bit wider than the paper's listing (`max+1`), so that the
  carry out of an exponent sum is kept.
* **Rounding.** There is no rounding: all precision loss is truncation.
* **Accumulator count.** The number of accumulators (36) is this design's own choice.
* **Output path.** Outputs go from the PEs straight to the unpacking unit. They do not pass
  through the output buffer.
* **Dataflow.** Only the output-stationary dataflow is implemented. The weight-stationary style
  is not.
* **Outside the chip.** The off-chip DRAM/HBM and the host compiler are not modelled. The top
  exposes the stream ports and the CSR port that they would drive.

## Workloads

The evaluated models are Bert-base, Llama-2-7b, Llama-2-70b and GPT-3. All use sequence length
2048. Their hidden and FFN sizes are 768/3072, 4096/11008, 8192/28672 and 12288/49152.

At FP6, only Bert-base's largest weight matrix fits whole in the 2 MB weight buffer. The others
are processed as a stream of tiles. A tile is at most `X·na` by `Y·nw` by 30.

## Simulating with Verilator

Each testbench checks itself and ends by printing `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/flexibit_pkg.sv tb/tb_ref_pkg.sv tb/tb_flexibit_top.sv \
    --top-module tb_flexibit_top -o sim
./obj_dir/sim
```

Use the same command with `tb_fb_pe`, `tb_fb_fbea`, `tb_fb_bpu` and so on for the other blocks.

* `tb_ref_pkg` holds the reference model: it decodes and encodes FP and INT values and draws
  random elements.
* `tb_flexibit_top` runs three tiles through the whole chip at its default size, then compares
  every output with the reference model:
  1. FP6 × FP5 with K = 30;
  2. INT8 × INT4 with K = 16;
  3. FP8 E4M3 × E4M3 with MX scales.

  It also counts BPU stalls and output back-pressure cycles.
