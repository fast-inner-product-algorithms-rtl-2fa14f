# FFIP: a systolic matrix unit with half the multipliers

This is synthesizable SystemVerilog for a DNN inference accelerator built
around the *free-pipeline fast inner product* (FFIP). FFIP computes a matrix
product with about half the multiplications of the ordinary
multiply-accumulate form. It trades the saved multipliers for cheap adders,
and those adders fit into a weight-stationary systolic array without adding
pipeline stages.

The main configuration is a 64 x 64 array with 8-bit signed fixed-point data.
Its 64 x 64 output tile uses 32 x 64 multipliers, plus one extra row of 32.
The rest of the accelerator is built around that array: the on-chip layer
memory, address generators, weight streaming, accumulation and
requantization.

## 1. The arithmetic

For an output element `c = sum_k a_k b_k` with an even number X of terms,
pair the terms and write

```
c = sum_{pairs} (a_{2k-1} + b_{2k}) (a_{2k} + b_{2k-1})  -  alpha  -  beta
alpha = sum_pairs a_{2k-1} a_{2k}        (depends only on the input row)
beta  = sum_pairs b_{2k-1} b_{2k}        (depends only on the weight column)
```

This is the classic fast inner product (FIP). There is one multiplication
per *pair*. `alpha` is computed once per input row and shared by every
output column. `beta` is a constant per output column, so it is folded into
the bias offline (the bias table stores `bias_j - beta_j`).

Plain FIP needs an extra adder per operand in each PE, and the operand sums
differ for every column. FFIP removes that cost by letting the sums flow
down the array. Define, for column j of the weight tile,

```
y_{k,1} = b_{k,1}          y_{k,j} = b_{k,j} - b_{k,j-1}   (j > 1)
g^(1)_{2k-1} = a_{2k} + y_{2k-1,1}      g^(1)_{2k} = a_{2k-1} + y_{2k,1}
g^(j)        = g^(j-1) + y_{.,j}
```

Then `g^(j)_{2k-1} = a_{2k} + b_{2k-1,j}` is exactly the FIP operand of
column j. Each PE therefore needs one adder per operand, fed from the PE
above, and its register is the pipeline register that a systolic array has
anyway. The `y` values are precomputed weight differences on `w+1` bits.

**Zero point.** With asymmetric weight quantization, every weight carries a
layer-wide offset `r`. The true product `sum a (b - r)` differs from the
array result by `r * sum_k a_k`. A small adder tree with one multiplier
computes that term per row. It is added to `alpha` before the subtraction, so
the correction costs nothing per column.

**Widths.** For `w = 8`:

- `a` and `b` are `w` bits.
- `y` is `w+1` bits.
- `g` is `w+d` bits with `d = 1`, for signed inputs.
- Row partial sums and `alpha` are `2w + clog2(X) + 1 = 23` bits.

All these datapath adders wrap in two's complement. The wrap is harmless:
the final `g = a + b` always fits in `w+1` bits, so any intermediate
overflow cancels.

## 2. The matrix unit (`ffip_mxu`)

```
  a_i (X x w) --> triangular buffer --> zero-point adjuster --> alpha row --> PE row 1 ... PE row Y
                 (pair p delayed p)     (r * sum a)            (alpha_i)     |  g flows down,
                                               \___ p register ___/          |  partial sums flow right
                                                     |                       v
                                          register chain beside the rows --> subtract at each row end -> c[j]
```

- **Geometry.** There are X/2 PE columns (one per operand pair) and Y PE
  rows (one per output column of the weight tile).
- **PE (`ffip_pe`).** Each PE holds two `y` values per bank. It adds them to
  the incoming `g` pair and registers the result. The registered pair goes
  to its own multiplier and to the PE below. The product is added to the
  partial sum arriving from the left.
- **Input skew.** The input row enters through a triangular buffer
  (`tri_buffer`, lane k delayed `ceil(k/2)` cycles, so pair p is p cycles
  late). This matches the one-cycle-per-column progress of the partial
  sums. The pair is swapped on entry, so `g_{2k-1}` starts from `a_{2k}`.
- **alpha and zero point.** `alpha_generator` and `zp_adjuster` are systolic
  rows of the same shape. Their sum is registered once and then travels
  down a register chain beside the PE rows. Each row subtracts it from its
  finished sum.
- **Timing.** A row `a_i` presented at cycle `t` appears on output row `j`
  (0-based) at cycle `t + X/2 + j + 3`, flagged by `c_valid[j]`. A new row
  may enter every cycle. The output is
  `c'_{i,j} = sum_k a_{i,k} b_{k,j} + beta_j - r sum_k a_{i,k}`.

### Loading weights while computing

Every PE has two `y` banks. Each input row carries a bank bit that travels
down with its `g` values, so a bank switch takes effect exactly at the first
row that names the new bank, with no bubble. The idle bank is loaded while
the other one computes.

A weight tile is delivered as Y columns of X weights, one column every other
cycle. Columns are given in the order `j = Y ... 1`, because the first
column shifted in ends up in the bottom row.

1. `y_generator` turns consecutive columns into differences. It emits `y_j`
   as soon as `b_{j-1}` arrives, and `y_1 = b_1` two cycles after the last
   column.
2. The `y` values shift down each PE column through the bank being loaded.
3. `wshift_ctrl` decides which rows shift. Instead of a broadcast enable, a
   local enable shift register runs beside each column. It is preloaded with
   ones; then zeros enter from the bottom. Because data enter every other
   cycle while the zeros advance every cycle, each row freezes exactly when
   its own value has arrived.

The MXU starts shifting on the first column and raises `wl_done` when the
last row is frozen. The caller must not name a bank in `a_bank` while it is
being loaded. It must also not reload a bank while rows using it are still
inside the array (X/2+Y+3 cycles).

## 3. Around the array

**`gemm_unit`.** A product larger than one X x Y tile is computed in *K
passes*. Each pass streams M input rows against one weight tile.

- The skewed MXU outputs are realigned by a reversed triangular buffer (row
  j delayed Y-1-j), so a full Y-wide vector appears at once.
- A tag travels with each row through a matching delay line. It holds the
  accumulator row, the first-pass and last-pass flags, the N-tile index and
  the output address.
- On the first pass the vector overwrites its accumulator row; on later
  passes it is added. On the last pass the finished 32-bit sums go on
  instead.
- A row entering at `t` leaves as `res_valid` at `t + X/2 + Y + 3`.
- The accumulator holds 1024 rows, which is also the largest M per pass.

**`post_gemm`.** Three register stages per vector:

1. Add the bias of the current N tile. The table holds `bias_j - beta_j`.
2. Rescale with a 16-bit multiplier and a rounding arithmetic shift:
   `(x*m + 2^(s-1)) >>> s`.
3. Apply an optional ReLU, then saturate to `w`-bit signed.

The output comes three cycles after the input.

## 4. Memory and address generation

**Layer memory (`layer_io_mem`).** Layer inputs and outputs never leave the
chip. One memory word holds X = 64 elements along the input-channel
dimension, which is exactly one MXU input row. The default depth of 65536
words is enough for the largest ResNet and AlexNet layer input plus output
(conv1).

**Tiler (`mem_tiler`).** Convolutions run as GEMMs without an im2col copy.
The address generator is a chain of seven counters (digits), least
significant first: `w, h, cin_t, kw, kh, h_t, n_t`. Each digit has a size and
a stride. The address is `base + sum(index_d * stride_d)`, kept as running
per-digit offsets so that no multiplier is needed. A digit advances when all
lower digits wrap.

For a KxK convolution over a feature map stored as words
`(row, col, channel tile)`, choose the strides as follows:

- The `w` and `h` digits walk the output pixels of one tile. Their strides
  are the feature map's column and row strides, times the convolution
  stride.
- `cin_t`, `kw` and `kh` select one (channel tile, kernel offset)
  combination per pass.
- `h_t` moves to the next tile of output rows.
- `n_t` repeats everything for the next tile of output channels; its stride
  is normally 0.

The same module, with wider addresses, walks the weight columns in DRAM.

## 5. The accelerator (`ffip_accel`)

```
 host write port ---> layer IO memory <--- post-GEMM <--- GEMM unit (MXU + accumulator)
                          |                                   ^            ^
                   layer IO tiler ---------> rows ------------+            |
 DRAM read port <--- weight tiler ; DRAM responses ---> weight FIFO ---> weight loader
```

A layer is configured on ports, then `start` is pulsed. The configuration
gives:

- the two tiler programs;
- M (rows per pass), K (passes per output), H_t (M tiles) and N_t (weight
  column tiles);
- the output base address;
- the zero point, rescale factor, shift and ReLU enable.

The pass order is k fastest, then h_t, then n_t. The results of pass group
`(n_t, h_t)` are written to `out_base + (n_t*H_t + h_t)*M + m`.

- **Weight path.** The weight tiler issues DRAM reads as long as the 2Y-deep
  FIFO has room, counting reads still in flight. When a whole tile is in the
  FIFO and the next bank is free, the loader pushes it into the MXU, one
  column every other cycle.
- **Bank states.** Each bank cycles through *free -> loading -> ready ->
  streaming -> draining -> free*. Draining lasts until the last row that
  used the bank has left the array.
- **Streamer.** The streamer reads one row per cycle and stalls only when
  the next pass's bank is not ready. Each pass is one unbroken burst of M
  rows.
- **Counters.** `stall_cycles` counts cycles lost waiting for weights.
  `overlap_cycles` counts cycles in which loading and computing overlapped.
- **Completion.** `done` pulses when the last output row has been written.

**Balance between loading and streaming.** Loading a 64 x 64 tile takes 128
cycles. A pass therefore needs M >= 128 rows to hide weight loading
completely. Below that the array waits, which is the normal situation for
fully-connected layers at batch size 1.

## 6. Where this design departs from the paper

The arithmetic, the PE, the MXU organisation (skew buffer, zero-point row,
alpha row, register chain, row-end subtraction), the localized weight-shift
control, the seven-digit tiler, and the bias/beta folding follow the
source. The following are this design's own choices or omissions:

- **Own additions and parameters**
  - The weight double buffer is realised as two banks inside every PE,
    selected by a bit that travels with the data. The source only asks for
    an extra tile buffer.
  - The output realignment buffer and the accumulator are this design's:
    1024 rows of 32-bit sums, with first/last flags in a tag.
  - The requantization format (16-bit multiplier, rounding shift), ReLU as
    the activation, and a 16-entry bias table are own choices.
- **Omitted or simplified**
  - The source draws a triangular buffer on the weight path ahead of the y
    generator. With stationary weights loaded through the enable chain it is
    not needed and is left out.
  - The source splits the layer memory into two half-rate banks, each with
    its own tiler, read interleaved, with an address remap at block edges.
    Here one full-rate memory is used.
  - The address formula of the source's pseudo-code leaves out the `n_t`
    term, while its block diagram adds it. The diagram is followed; a stride
    of 0 gives the pseudo-code's behaviour.
  - Not built: padding and pooling units, the instruction decoder, the PCIe
    host link and the multiple clock domains.
  - The top instead takes its configuration on ports, has a host write port,
    and runs from one clock.
- **Configuration limits**
  - The top requires X == Y so that an output row fits one memory word.
  - The defaults are the 8-bit configuration. For 16-bit data set `W=16`
    and widen `OUT_W` to at least 47 bits. That configuration is simulated
    end to end only at X = Y = 8.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each compares against
values computed directly from the definitions, and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_ffip_pe` | g update and multiply-accumulate every cycle, both banks |
| `tb_tri_buffer` | lane delays of the paired and reversed forms |
| `tb_y_generator` | y differences, order and spacing |
| `tb_alpha_generator`, `tb_zp_adjuster` | systolic sums with their skew |
| `tb_wshift_ctrl` | each row freezes on its own weight |
| `tb_ffip_mxu` | full products, per-row latency, loading one bank while the other computes, zero point |
| `tb_gemm_unit` | K-pass accumulation, latency X/2+Y+3, tags |
| `tb_post_gemm` | bias, rounding, ReLU, saturation, 3-cycle latency |
| `tb_mem_tiler` | address sequence against the seven nested loops of a 3x3 convolution |
| `tb_layer_io_mem` | registered reads and writes |
| `tb_ffip_accel` | two layers end to end at X=Y=8 |
| `tb_ffip_accel_full` | the same at the default 64 x 64 size |
| `tb_ffip_mxu_w16`, `tb_ffip_accel_w16` | the matrix unit and the whole accelerator with 16-bit data (48-bit accumulators) at reduced array size |
| `tb_ffip_accel_conv` | 3x3 convolutions, stride 1 and 2, mapped to GEMM in place by the tiler, against a direct convolution |

The two end-to-end tests use a behavioural DRAM model (`weight_dram_model`,
random latency and back-pressure). Each counts every mechanism and fails if
one never occurred:

- weight stalls;
- loading overlapped with computing;
- bank switches;
- accumulation over passes;
- a non-zero zero point;
- ReLU clamping;
- saturation.

They also require each pass to stream as one burst.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ffip_pkg.sv tb/tb_ffip_mxu.sv --top-module tb_ffip_mxu
./obj_dir/Vtb_ffip_mxu
```

The full-size test takes a few minutes to build and under a second to run.

## 8. Files

| file | contents |
|---|---|
| `rtl/ffip_pkg.sv` | default sizes, accumulator-width function, tiler and tag types |
| `rtl/ffip_pe.sv` | FFIP processing element |
| `rtl/tri_buffer.sv` | triangular skew / deskew buffer |
| `rtl/y_generator.sv` | weight difference generator |
| `rtl/alpha_generator.sv` | alpha row |
| `rtl/zp_adjuster.sv` | zero-point row |
| `rtl/wshift_ctrl.sv` | local weight-shift enable chain |
| `rtl/ffip_mxu.sv` | the matrix unit |
| `rtl/gemm_unit.sv` | MXU, deskew, accumulator |
| `rtl/post_gemm.sv` | bias, rescale, activation |
| `rtl/mem_tiler.sv` | seven-digit address generator |
| `rtl/layer_io_mem.sv` | layer memory |
| `rtl/ffip_accel.sv` | top level and sequencer |
