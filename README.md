# FSL-HDnn: few-shot learning with a clustered-weight CNN and a hyperdimensional classifier

This design lets a small chip learn new classes from a handful of examples,
and it does so without back-propagation. It has two parts:

- A **frozen CNN feature extractor** turns an image into a feature vector.
  The CNN's weights are clustered: each 3x3 filter uses only 16 distinct
  values. All pixels that share a cluster are summed first and multiplied
  only once, which removes most multiplications.
- A **hyperdimensional-computing (HDC) classifier** projects the feature
  vector into a long integer vector, a hypervector (HV), of dimension D. It
  then compares this HV with one stored HV per class. Training is a single
  pass: the sample's HV is added to or subtracted from a class HV.

The RTL is SystemVerilog-2017 and synthesizable. There is one clock and an
active-low asynchronous reset. A host drives everything through a command
FIFO and an answer FIFO.

```
 host cmd (96b) ─► [cmd FIFO] ─► io_interface ──► config registers
                                    │  │  │
            ┌───────────────────────┘  │  └──────────────────────────┐
            ▼                          ▼                             ▼
   feature_extractor                 hdc_classifier            [answer FIFO] ─► host (64b)
   act_mem 8x16KB ─┐                 crp_encoder (256-bit base block)
   cidx 16x512x36b ├─► fe_ctrl ─►    query HV buffer 512x16xINT16
   weights 128x16  ┘   4x16 PE array class HV memory 4096x16xINT16 (128 KB)
                       │             dist_calc ─► dist_min ─► hv_updater
                       ▼                ▲
                   out_feat_buf ────────┘ (64 features per read)
```

## Weight clustering and the four-register-file PE

Each filter (one output channel, one input channel, 3x3 taps) stores two
things:

- a 4-bit cluster index per tap, nine indices in all, which together make
  a 36-bit *pattern*;
- a table of 16 BF16 cluster values per output channel.

An output pixel is then Σ_k w[k] · (Σ of the input pixels whose tap has
index k). The pattern is shared by all output channels handled by one PE
column. The pixel sums can therefore be built once per column and reused
for every output channel of that column.

The array is 4 x 16 PEs:

- A PE row makes one output row and shares one 16-bit pixel bus.
- A PE column makes one set of output channels. It shares the 36-bit
  pattern bus and the 16-bit weight bus.

Each PE (`fe_pe`) holds four register files (RFs) of 16 BF16 entries, one
entry per cluster. Input columns arrive one at a time. A pixel of input
column x belongs to three 3x3 windows, those of output columns x-2, x-1
and x. Three RFs therefore accumulate the pixel in parallel. Each one adds
it to the entry picked by the pattern field for that window's kernel
column.

The fourth RF holds the sums of a window that has just been completed. It
is read entry by entry and multiplied by the 16 cluster weights into an
output accumulator. Roles rotate with the input column:

- RF r serves output columns c with c mod 4 = r.
- At input column x, the multiply RF is (x+1) mod 4, which holds output
  column x-3.
- An RF is cleared when it leaves the multiply role, so it is empty when it
  starts accumulating again.

### Schedule (fe_ctrl)

A layer is processed in tiles of 4 output rows. A tile reads 6 input rows.
Input row r is stored in activation bank r mod 8, so the 4 row buses never
collide. Within a tile, each input column x = 0..w_in gets one *slot* of
L = max(3·cin, 16·noc) cycles:

- In cycles 0..3·cin-1, pixel (row+ky, x, channel) goes to each PE row.
  The column's pattern for that channel is on the index bus. This is the
  accumulate half.
- In cycles 0..16·noc-1 of the same slot, the multiply RF is read for
  cluster k and output channel j of the column. The matching weight is on
  the weight bus. After 16 clusters the PE presents an output pixel. This
  is the multiply half.
- The two halves overlap, which is the point of the fourth RF. The slot for
  x = w_in only finishes the last window.

Output pixel (tile, ox, output channel j) lands in out_feat_buf entry
(tile·(w_in-2) + ox)·noc + j. It occupies lane PE_row·16 + PE_col, and the
64 PEs write one entry at once. A layer run takes
n_tiles·(w_in+1)·L + 4 cycles. Convolution is 3x3, stride 1 and unpadded.

### Fixed sizes

| Memory | Size |
|---|---|
| Activation | 8 banks × 8192 BF16 (8 × 16 KB) |
| Pattern | 16 columns × 512 input channels × 36 b |
| Weight | 128 words × 16 columns, i.e. 8 output channels × 16 clusters per column |
| Output buffer | 256 entries × 64 BF16 (32 KB) |

A layer with more than 128 output channels, or with an image larger than
the activation memory, is split by the host into several runs.

BF16 arithmetic (`bf16_add`, `bf16_mul`) truncates toward zero and
flushes subnormals to zero. Results can therefore differ from IEEE
round-to-nearest in the last bit.

## Cyclic random projection encoder

Classic random-projection encoding multiplies the F features by a random
F×D sign matrix, which is far too large to store. The cRP encoder
(`crp_encoder`) stores one 256-bit base block and generates the matrix row
for HV element d on the fly:

- Inside a group of 256 rows, row d uses the base block rotated left by
  d mod 256. Feature f therefore takes bit (f - d) mod 256 of the current
  block.
- After each 256 rows the block is permuted: P(v)[i] = v[(5i + 3) mod 256].
  5 is odd, so this is a bijection.
- A 1 bit means -x, a 0 means +x.

Per cycle, one block of 256 features passes through an adder tree. An HV
element takes ceil(F/256) cycles, and element d is
sat16((Σ_f ±x_f) >>> enc_shift).

Features come from the output buffer starting at entry feat_base. Feature
f is entry feat_base + f/64, lane f mod 64. Each BF16 value is converted
to an integer as trunc(x / 2^feat_shift), saturated to INT16. The load
takes ceil(F/64) cycles.

## Distance search, precision and training

Class HVs are INT16 and stored 16 per word in the 128 KB class memory.
Class n, element d is at n·D + d, so N·D ≤ 65536. The distance to class n
is Σ_d |q_d − c_d|, computed 16 elements per cycle:

- At precision b (1..16), both operands are first shifted right
  arithmetically by 16 − b, so only their top b bits count.
- Distances go into a distance table, which the host can read.
- A running minimum with strict `<` keeps the first, lowest-numbered class
  on a tie.

In training mode the chosen (predicted) class HV is then updated:

- It is increased by the sample's HV if the prediction equals the label,
  and decreased otherwise.
- Elements saturate at the INT16 limits.
- The update goes through the class memory in place, 16 elements per
  cycle.

| Phase | Cycles |
|---|---|
| Inference | (ceil(F/64) + 2) + D·ceil(F/256) + N·D/16 + 4 |
| Training | inference + D/16 + 3 |

## Host interface

A command is `{op[3:0], target[3:0], addr[23:0], data[63:0]}` (`fsl_pkg::cmd_t`).

| op | meaning |
|---|---|
| 1 WRITE | write `data` to target/addr |
| 2 READ | push the addressed value into the answer FIFO |
| 3 RUN_FE | run one convolution layer; later commands wait until it ends |
| 4 RUN_HDC | `data[0]` = train, `data[14:8]` = label; pushes `{correct, 24'b0, class[6:0], distance[31:0]}` when done |

| target | address |
|---|---|
| 0 activations | {bank[2:0], word[12:0]}; word = (row/8)·w_in·cin + x·cin + ch |
| 1 patterns | {column[3:0], input channel[8:0]}; nine 4-bit indices, field ky·3+kx |
| 2 weights | {column[3:0], out-channel·16 + cluster} |
| 3 output buffer | {entry[7:0], lane[5:0]} |
| 4 class HV | n·D + d |
| 5 cRP base | 64-bit word 0..3 |
| 6 config | cin, w_in, n_tiles, noc, F, D, N, hv_bits, enc_shift, feat_shift, feat_base (0..10) |
| 7 distance table | class (read only) |

The interface handles one command at a time:

- While an engine runs, commands wait in the FIFO. `io_stall_cycles`
  counts the cycles a command waited.
- If the answer FIFO is full, command processing stops until the host
  takes an answer.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. References are
computed independently inside the testbench:

- BF16 results are compared with real arithmetic within the truncation
  bound.
- Convolutions are compared with a direct sum.
- Encodings and distances come from a software model of the rotation and
  permutation rule.
- Cycle counts are checked against the formulas above.

`tb_fsl_hdnn_top` runs the top at its default sizes, using commands only:

1. Load a 6×6×2 image, patterns and weights, and run a layer.
2. Compare the 256 output pixels.
3. Use them as an F = 256 feature vector and run 16-bit and 2-bit
   inference with D = 1024 and N = 4.
4. Train once with a correct prediction and once with a wrong one.

It also counts these mechanisms and fails if any never occurs: RF
rotation, overlapped accumulate/multiply, FE run, inference, precision
switch, training add, training subtract, command stall and answer
back-pressure.

To simulate with plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/fsl_pkg.sv rtl/*.sv tb/tb_fsl_hdnn_top.sv \
          --top-module tb_fsl_hdnn_top -Wno-fatal
./obj_dir/Vtb_fsl_hdnn_top
```

`rtl/fsl_pkg.sv` must come first. List it once, for example by
replacing `rtl/*.sv` with the remaining files. The top-level test takes
about half a minute, including compilation.

## Departures and open points

- **Unspecified details are this design's own choices:** the exact
  cyclic-generation rule, the number formats and rounding, the command
  format, the memory word layouts and the slot schedule.
- **Unspecified sizes:** the output feature buffer (32 KB) and the query HV
  buffer (16 KB). The pattern memory is 2.25 KB per column against the
  published 2.2 KB, and the weight memory is 4 KB against 4.2 KB.
- **Classes and dimension:** class HVs are always kept as INT16. With
  128 KB that allows N·D ≤ 65536, so the full 128 classes need D ≤ 512,
  below the 1024-minimum dimension. Likewise 20 classes at D = 4096 need
  81920 elements; 10 classes at D = 4096 and F = 512 fit. Storing HVs packed at lower precision
  would lift this limit, but the packing is not defined, so it is not done.
- **RF timing figure:** one timing figure of the original description
  labels a register file with an output column that does not fit a strict
  4-way rotation. The strict rotation is implemented.
- **Not implemented:** clock gating (a library cell with no defined enable
  policy), the pad ring, and any on-chip sequencing of several CNN layers,
  ReLU or pooling. The host runs layers one at a time and tiles large
  layers.
- **Synthesis size:** the memories are plain arrays. A generic synthesis
  flow turns them into flip-flops, and the whole top then needs far more
  memory than a small workstation has. A real implementation maps them to
  SRAM macros.
