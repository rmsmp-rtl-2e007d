# Row-wise mixed-scheme, multi-precision GEMM accelerator (RMSMP)

Quantizing a neural network to 4 bits forces a trade-off. Fixed-point weights
keep accuracy but need real multipliers. Power-of-two (PoT) weights turn every
multiplication into a shift but lose some accuracy. The RMSMP idea makes this
choice per **row** of a layer's weight matrix (one row is one convolution
filter or one output neuron), not per layer. Every row is quantized in one of
three ways:

| row class   | weight                | activation  | hardware operation |
|-------------|-----------------------|-------------|--------------------|
| PoT-W4A4    | 4-bit power of two    | 4-bit fixed | shift              |
| Fixed-W4A4  | 4-bit fixed point     | 4-bit fixed | 4b x 4b multiply   |
| Fixed-W8A4  | 8-bit fixed point     | 4-bit fixed | 8b x 4b multiply   |

The key constraint is that **every layer uses the same split**, 65 % : 30 % :
5 % in the main configuration. Because of that, the hardware can have one
GEMM core per row class, sized in the same ratio. All three cores are busy
for the same number of cycles in every layer, and none waits for another.
Nothing is reconfigured between layers. The 8-bit rows are the few filters
that are most sensitive to quantization; they recover the accuracy that
the PoT rows cost.

This repository holds synthesizable SystemVerilog for such an accelerator.
It has the three cores, their buffers, a layer sequencer and the
requantization back to 4-bit activations. It also holds self-checking
testbenches for every part.

## Number formats

Everything in the datapath is an integer. Each row class has its own
meaning for a weight code, so the three cores produce accumulators in
different units. A per-row scale factor reconciles the units at the end.

**Fixed-m weights** (m = 4 or 8) use the symmetric level set
`alpha * {-1, ..., -1/(2^(m-1)-1), 0, 1/(2^(m-1)-1), ..., 1}`. The stored code
is the integer level `k`, in two's complement, with `|k| <= 2^(m-1)-1`:
-7..7 for 4 bits and -127..127 for 8 bits. The real weight is
`alpha * k / (2^(m-1)-1)`.

**PoT-4 weights** use `alpha * {0, +-2^-6, +-2^-5, ..., +-2^0}`. That is seven
magnitudes plus zero, so a sign bit and a 3-bit code are enough:

```
w[3]   : sign
w[2:0] : e;  e = 0 -> 0,  e = 1..7 -> magnitude 2^(e-7)
```

The PE returns `+-(a << (e-1))`. That is the product in units of `2^-6`: a
4-bit activation of 15 with the weight 1.0 gives `15 << 6 = 960`.

The source formulas are not fully consistent for fixed point. The level set
above is symmetric and includes zero. The rounding formula given next to it
would instead produce 2^m evenly spaced levels without zero. This design
follows the level set.

**Activations** are unsigned 4-bit integers 0..15 (post-ReLU) for every row
class.

**Accumulators** are 25-bit signed. That is the smallest width that holds the
worst case of the largest ResNet-18 dot product: K = 4608 Fixed-8 products
of at most 127 * 15 each, 8.8 million in total.

**Requantization** (`act_quantizer`) turns a row accumulator into the next
layer's 4-bit activation:

```
q = clip( (acc * scale + 2^(shift-1)) >> shift , 0, 15 )
```

`scale` is a 16-bit unsigned number stored per row. It folds several factors
into one integer:

- the row's `alpha`;
- the step of its level set (1/7, 1/127 or 2^-6);
- the activation scale of this layer;
- the activation scale of the next layer.

`shift` is one value per layer. Negative results become 0, which is the ReLU.
Results above 15 saturate, and `sat_flag` records that it happened.

## The three GEMM cores

`gemm_core` is one parameterized module. Its `SCHEME` parameter selects the
PE type, and it is instantiated three times:

| core           | PE       | default PE rows | lanes |
|----------------|----------|-----------------|-------|
| GEMM_PoT-4     | pot4_pe  | 65              | 32    |
| GEMM_Fixed-4   | fixed_pe | 30              | 32    |
| GEMM_Fixed-8   | fixed_pe | 5               | 32    |

Each core is output-stationary. PE row `r` owns one filter of the current
tile. Each cycle with `in_valid`:

1. All rows receive the same 32-element activation chunk.
2. Each row multiplies the chunk by 32 of its own weights and sums the 32
   products.
3. Each row adds the sum to its accumulator.

`in_first` starts a new dot product. The accumulators are valid one cycle
after the chunk is presented. On an FPGA the multiplier cores are the ones
that use DSP slices, and the shift core uses only LUTs. The row ratio is
therefore also a ratio between the two kinds of resource.

A *row tile* is 65 + 30 + 5 = 100 filters, one per PE row across the three
cores. Filters are grouped by row class, not kept in their original order.
The first 65 PoT filters of a layer form the PoT part of tile 0, and so on.

## Running a layer

A layer is a GEMM of `M` filters by `K` inputs by `N` activation columns. For
a convolution, `K` is kernel height x kernel width x input channels, and `N`
is the number of output pixels. The host splits the layer into:

- `cfg_kc` chunks of 32 inputs (K = 32 * cfg_kc, zero-padded);
- `cfg_n` columns;
- `cfg_t` row tiles.

The host also gives the number of filters of each class
(`cfg_rows_pot/f4/f8`). Row slots beyond those counts are written as 0.

The layer controller walks tile, then column, then K chunk, and issues one
chunk per cycle to all three cores at once:

```
cycle c     issue   : weight address = tile*cfg_kc + k   (same for all cores)
                      activation address = col*cfg_kc + k
cycle c+1   compute : buffer data at the cores, in_first on k = 0
cycle c+2   write   : after the last chunk, accumulators are final; each row
                      is requantized and the 100 results are written as one
                      400-bit word at output address tile*cfg_n + col
```

The run has no stalls and no bubbles. A layer of `L = cfg_t * cfg_n * cfg_kc`
chunks keeps the cores busy for `L` cycles, and `done` pulses `L + 4` cycles
after the clock edge that samples `start`. The controller test and every
end-to-end test check this count.
The weight chunk is read again for every column; the activation chunk is
shared by all 100 rows.

### Buffers and their layout

| buffer              | organisation                                            | default size |
|---------------------|---------------------------------------------------------|--------------|
| weights, per core   | one bank per PE row; word = 32 weights; addr = tile*cfg_kc + k | 864 words/bank |
| scales, per core    | one bank per PE row; word = 16-bit scale; addr = tile   | 6 words/bank |
| activations         | word = 32 x 4 bit; addr = col*cfg_kc + k                | 8192 words   |
| output              | word = 100 x 4 bit (PoT rows low, then Fixed-4, then Fixed-8); addr = tile*cfg_n + col | 6144 words |

The output stays grouped by row class. The next layer's input channels
therefore arrive permuted. Because the permutation is known offline, it is
meant to be absorbed into the column order of the next layer's weights. The
hardware does no reordering.

### Host sequence

1. Write the weights: for each core, tile, PE row and chunk, put 32 weights
   on `w_data` with `w_we`, `w_core`, `w_row` and `w_addr`. The 4-bit cores use
   bits `[127:0]`; the 8-bit core uses all 256 bits.
2. Write one scale per (core, tile, row) with `s_we`.
3. Write the activations with `a_we`.
4. Set the `cfg_*` inputs, pulse `start` and wait for `done`.
5. Read the outputs with `o_re` and `o_addr`. The data appear on `o_data` one
   cycle later.

An assertion flags any load while `busy` is high.

## Sizes and what they mean

The default build is the 65:30:5 configuration:

- **Compute:** 100 PE rows x 32 lanes = 3200 multiply-accumulates per cycle.
  At 100 MHz that is a peak of 640 GOP/s. The reference evaluation reports
  421 GOP/s and 8.6 ms for ResNet-18 on an XC7Z045 at this ratio. The peak
  is consistent with that: ResNet-18 has about 1.8 G MACs, which would take
  5.7 ms at full use of this array.
- **Weight buffers:** sized for ResNet-18's largest layers: K up to
  4608 = 144 x 32 and up to 512 filters (6 tiles).
- **All buffers together:** about 15 Mbit, which fits an XC7Z045's block
  RAM.

Larger layers are handled by the host:

- more filters: several row groups;
- more output pixels than `N_MAX` or than the activation buffer holds: column
  slices.

## How far this follows the reference design

The following come from the RMSMP paper:

- the three row classes;
- the PoT and Fixed level sets;
- 4-bit activations for every class;
- three separate GEMM cores whose sizes follow the row ratio;
- the ratios 65:30:5 (main) and 60:35:5 (smaller device);
- layer-by-layer execution on the same cores;
- the 100 MHz clock.

The paper does not describe the inside of the accelerator. The following are
choices made here, and a reader should treat them as such:

- the bit encodings;
- unsigned activations;
- 32 lanes;
- reading the ratio as 65/30/5 PE rows;
- the output-stationary array;
- the buffers and their layouts;
- the loop order and pipeline;
- integer requantization with per-row scales, ReLU and round-half-up;
- leaving row reordering to the next layer;
- the host port interface.

In particular:

- The reference results map the Fixed cores onto DSP slices, possibly with
  several narrow products packed per DSP. Here they are plain multipliers.
- Depthwise convolutions (MobileNet-v2) do not fit a shared-activation array
  well. They would have to run one filter at a time, and the reference does
  not say how it handles them.
- Attention products in BERT (activation times activation) are outside this
  datapath.
- The offline algorithm that assigns rows to classes (Hessian-based choice
  of the 5 % 8-bit rows, variance-based choice between PoT and Fixed) is
  software and is not part of this RTL.

## Files

`rtl/`

- `rmsmp_pkg.sv`: row-class enum, widths, helper functions.
- `pot4_pe.sv`, `fixed_pe.sv`: the two PE types.
- `gemm_core.sv`: one GEMM core (PE array with per-row accumulators).
- `act_quantizer.sv`: per-row requantization.
- `layer_controller.sv`: layer sequencing and pipeline alignment.
- `scheme_unit.sv`: one row class's weight buffer, core, scale table and
  requantizers.
- `row_bank_ram.sv`, `sram_1r1w.sv`: buffer memories.
- `rmsmp_accel.sv`: the top level.

`tb/`: one self-checking testbench per unit.

- `tb_pot4_pe`, `tb_fixed_pe`: exhaustive.
- `tb_act_quantizer`: corner cases plus 20k random cases.
- `tb_gemm_pot4`, `tb_gemm_fixed4`, `tb_gemm_fixed8`: random dot products,
  with 1-cycle latency checked.
- `tb_layer_controller`: addresses, flags and cycle counts over random layer
  shapes.
- Three end-to-end tests of the top:
  - `tb_rmsmp_accel`: reduced 13:6:1 array, four layers;
  - `tb_rmsmp_accel_z020`: the 60:35:5 ratio as 12:7:1;
  - `tb_rmsmp_accel_full`: every parameter at its default, two layers.
  - `tb_resnet18_layers`: defaults; two ResNet-18 layer shapes with
    pseudo-random weights. One is the largest layer (3x3, 512 to 512
    channels on a 7x7 map: K = 4608, 512 filters in 6 tiles, 42,336 compute
    cycles). The other is a 1024-pixel slice of the first 7x7 convolution
    (K = 147, padded to 160).

  They compare every output word with a model computed from the real level
  values. They also check that each mechanism occurred at least once:
  multi-chunk accumulation, several tiles, unused row slots, ReLU clipping,
  saturation, and back-to-back layers.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/rmsmp_pkg.sv \
          tb/tb_rmsmp_accel.sv --top-module tb_rmsmp_accel -Mdir obj
./obj/Vtb_rmsmp_accel
```

The full-size test takes under a minute to build and a fraction of a second
to run. To change the array, override `POT_ROWS`, `FIX4_ROWS`, `FIX8_ROWS` and
`LANES` on `rmsmp_accel`. To change the buffer capacity, override `KC_MAX`,
`N_MAX`, `T_MAX` and `ABUF_DEPTH`.
