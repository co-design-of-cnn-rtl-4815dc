# A multiplier-less CNN accelerator based on approximate weight matrix decomposition

A convolution layer normally costs one multiplier per weight. This design
removes every multiplier. It approximates each weight matrix, offline and
without retraining, by a product of small sparse matrices. Every coefficient in
those matrices is zero or a signed power of two with a non-positive exponent:
`0`, `±1`, `±1/2`, `±1/4`, … `±2^-Z`. Multiplying an activation by such a
coefficient needs only a wire-level right shift and a sign. A product of a few
such matrices, with a few non-zeros per row, is a short chain of shifts and
small additions.

The hardware is a weight-stationary systolic array. Each processing element
(PE) evaluates one such matrix product for one slice of input channels. The
RTL in `rtl/` is parameterised SystemVerilog. Its defaults are the main design
point: a DS-CNN keyword-spotting network with `P=2, Z=3, E=3, M=4, S_W=4` on an
8 × 12 PE grid. It covers the PE, the array, the on-chip buffers, the
accumulator and a layer sequencer. Self-checking testbenches are in `tb/`.

## 1. The decomposition, as the hardware sees it

A layer's weights are arranged as a matrix with one row per output channel and
one column per input channel × kernel position. This matrix is cut
into slices of `S_W` columns and groups of `M` rows. Each `M × S_W` block `W_s`
is approximated as

    W_s ≈ F_{P-1} · … · F_1 · F_0

- **`F_0` (M × S_W).** This is the first matrix that carries coefficients. Its
  non-zeros can only lie in its `S_W` columns, so each coefficient is hardwired
  to "its" input. The hardware stores a full `M × S_W` grid of codes. Each code
  has a zero flag, a sign and a shift amount.
- **`F_gen` (M × M), used `P-1` times.** Each row has `E` non-zeros. One of
  them is fixed to `+1` on the diagonal (the *diagonal optimisation*). Only the
  other `E-1` are coded. Each of those carries a column index, a sign and a
  shift amount, so it needs an input multiplexer.

`P` is the number of factors, so one slice needs one `F_0` evaluation and
`P-1` `F_gen` evaluations. The original formulation starts the chain with a
fixed identity matrix padded with zeros, then a first coded matrix whose
non-zeros lie in its first `S_W` columns. The identity needs no hardware. The
`F_0` here is that first coded matrix, and the numbering is shifted down by
one. The sum over all slices and kernel positions gives
the `M` outputs. Code layouts (MSB first, `SH_W = clog2(Z+1)`,
`IDX_W = clog2(M)`):

| code | fields | width at defaults |
|---|---|---|
| `F_0` element | `{nz, neg, sh[SH_W-1:0]}` | 4 bits |
| `F_gen` element | `{neg, sh[SH_W-1:0], idx[IDX_W-1:0]}` | 5 bits |

**Arithmetic.** Activations are 8-bit signed integers. A shift is an arithmetic
right shift, so it rounds towards −∞. Each shift unit result is one bit wider
than its input, so negating the most negative value is safe. Widths then grow
through the adder trees:

- `F_0` output: `ACT_W + clog2(S_W) + 1` bits.
- Each `F_gen` pass adds `clog2(E)` bits, up to `P_MAX-1` passes.
- Partial sums across the array row: 24 bits.
- Output buffer words: 32 bits per channel.

No value is ever saturated. Requantisation and activation functions are left to
whoever reads the output buffer.

## 2. The processing element (`wmd_pe`)

```
 vin[S_W] ──► F_0 block ──► reg ──► F_gen block ──► reg ─┬─► M adders ──► psum_out reg
   │         (S_W shift     M      (E-1 shift units      │       ▲
   │          units / row,  words   + mux per row,       │    psum_in (left PE)
   │          adder tree)           diag. term, tree)    │
   │                                        ▲            │
   │                                        └────────────┘  time-multiplexed for P > 2
   └──► reg ──► vout (to PE below)
```

- `f0_block` has `M` rows of `S_W` shift units and an adder tree per row.
- `fgen_block` has `M` rows. Each row has `E-1` shift units with
  `M`-to-1 input multiplexers, plus the diagonal input, reduced by an adder tree.
- `shift_unit` forms the `Z+1` shifted copies of its operand by wiring. A
  multiplexer picks one, then an optional negation is applied.

The PE holds the codes of one `F_0` and of `P_MAX-1` `F_gen` matrices in
registers. That is 144 bits per PE at the defaults. A write of `w_data` with
`w_load` replaces all of them at once.

**Timing.** A vector accepted in cycle `t` proceeds as follows:

1. The `F_0` result is registered at `t+1`.
2. `F_gen` pass `j` is registered at `t+1+j`.
3. The last pass (`j = P-1`) is added to `psum_in` while it is produced. The
   sum is registered in `psum_out` at `t+2+(P-1)`.

For `P = 2` the PE accepts a new vector every cycle. For `P > 2` the single
`F_gen` block is reused: its result is fed back and multiplied by the next
matrix. The PE then accepts a vector every `Lat_F = P-1` cycles, which is
exactly the latency factor `1 + (P-2)` of the performance model. `P` is a
run-time per-layer setting (`2 … P_MAX`, `P_MAX = 3` by default).

## 3. The systolic array (`systolic_array`)

```
                 in_vec[0]   in_vec[1]   …  in_vec[PE_X-1]     (channels x*S_W … x*S_W+S_W-1)
                 skew 0      skew 1         skew PE_X-1
                   │           │               │
 row 0:  0 ──►  PE(0,0) ──► PE(1,0) ──► … ──► PE(PE_X-1,0) ──► deskew PE_Y-1 ─┐
                   │           │               │                              │
 row 1:  0 ──►  PE(0,1) ──► PE(1,1) ──► … ──►      …        ──► deskew PE_Y-2 ─┤─► out_sum[PE_Y][M]
                   ⋮                                                          │
 row PE_Y-1: …                                              ──► deskew 0     ─┘
```

- **Columns share inputs.** Column `x` receives input channels
  `x·S_W … x·S_W+S_W-1` of the current pixel. The vector moves down the column
  one register per row, so every row sees the same activations.
- **Rows reduce partial sums.** Each row's PEs hold the `F` matrices of `M`
  different output channels. Partial sums move left to right through each PE's
  `M` adders. The right edge of row `y` delivers, for output channels
  `y·M … y·M+M-1`, the sum over all `S_W·PE_X` input channels of the pass.
- **Skew and deskew.** Column `x` is delayed by `x` cycles, so PE `(x,y)`
  sees a pixel `x+y` cycles after it entered. Row `y`'s result is then delayed
  by `PE_Y-1-y` cycles, so all `PE_Y·M` results of a pixel leave together.
- **Latency** from `in_valid` to `out_valid` is `(PE_X-1)+(PE_Y-1)+(P-1)+2`
  cycles: 21 at the defaults with `P = 2`.
- **Throughput** is `S_W·M·PE_X·PE_Y` weight applications every `Lat_F`
  cycles: 1536 per cycle at the defaults.
- **Loading.** Coefficients are loaded one PE row per cycle. `w_row` selects
  the row, and `w_data` carries the codes of its `PE_X` PEs (PE `x` at bits
  `[x·COEF_W +: COEF_W]`).

## 4. Mapping a layer: passes and the controller (`wmd_controller`)

A layer with `C_in` inputs, `C_out` outputs and a `K × K` kernel is folded into
`ceil(C_out/(M·PE_Y)) · K² · ceil(C_in/(S_W·PE_X))` *array passes*. Each pass
has one output-channel tile, one kernel position `(ky,kx)` and one input-channel
tile. Loop order, outermost first:

1. output-channel tile
2. `ky`
3. `kx`
4. input-channel tile
5. output row `oy`
6. output column `ox`

Each pass has three phases:

| phase | cycles | what happens |
|---|---|---|
| LOAD | `PE_Y` | one weight-buffer word per PE row is read and written into that row's PE registers |
| STREAM | `O_x·O_y·Lat_F` | for output pixel `(oy,ox)` the input pixel `iy = oy·stride+ky−pad`, `ix = ox·stride+kx−pad` is read; outside the map a zero vector is sent (padding) |
| DRAIN | array + accumulator latency | wait until no pixel is left in flight, so the next LOAD cannot change the result of a pixel still in the array |

Each pixel's output address and a *first* flag travel beside the array in a
small FIFO. The flag is set on the first pass that contributes to that output.
The output accumulator (`output_accumulator`) adds the array's `PE_Y·M` results
to the stored word, or overwrites it on a first pass. It is a two-stage
read-modify-write with forwarding, for back-to-back pixels at the same
address. It accepts one pixel per cycle.

## 5. Memories and the host interface (`wmd_accel`)

All memories are arrays with a synchronous read port, meant to map onto block
RAM. All addresses are in words.

| memory | word | depth (default) | address of |
|---|---|---|---|
| input buffer, one bank per array column | `S_W` activations of one pixel | 1024 | `cin_t·in_h·in_w + iy·in_w + ix` |
| weight buffer | codes of one PE row (`PE_X·COEF_W` = 1152 bits) | 256 | row `r` of pass `n`: `w_base + PE_Y·n + r`, with `n = ((cout_t·K + ky)·K + kx)·cin_tiles + cin_t` |
| output buffer | `PE_Y·M` sums of 32 bits | 1024 | `cout_t·out_h·out_w + oy·out_w + ox` |

The host protocol works as follows:

1. Write the input buffer (`in_wr_*`, one pixel's `S_W·PE_X` channels per word)
   and the weight buffer (`w_wr_*`).
2. Put the layer description on `cfg` (`layer_cfg_t` in `wmd_pkg`: `p, k,
   stride, pad, in_h, in_w, out_h, out_w, cin_tiles, cout_tiles, w_base`) and
   pulse `start`.
3. Wait for `done`. `busy` is high in between.
4. Read the output buffer (`out_rd_*`, one cycle latency, only while idle).

Output channel `c` of a tile is element `[c / M][c % M]` of the output word.
Channels beyond `C_out` in the last tile hold the sums of whatever codes were
loaded for them. Zero codes give zero.

## 6. Latency

The performance model counts only the streaming phase:

    Lat = Lat_F · K² · O_x·O_y · ceil(C_in/(S_W·PE_X)) · ceil(C_out/(M·PE_Y))

The published form of this formula writes the kernel factor as `K_{x,y}`.
The RTL supports square `K × K` kernels only and counts `K²` positions.
The RTL meets the streaming term exactly: pixels enter the array every `Lat_F` cycles
(the testbenches check it). Each pass adds `PE_Y` cycles of LOAD and about
`PE_X+PE_Y+5` cycles of DRAIN.

For a DS-CNN pointwise layer (25 × 5 map, 64 → 64 channels) at the defaults,
the model gives 500 cycles and the RTL takes 647. The four pointwise layers
take 2588 cycles, against about 2000 predicted. This overhead is the price of
loading weights only into an idle array.

The published measurement for these layers, 16.88 µs at 122 MHz, is about
2060 cycles. The published implementation therefore hides most of the
per-pass overhead, for example by loading the next weights while streaming.
It does not say how, so this design does not guess.

## 7. Design points and capacity

The defaults are the DS-CNN point. The grid size `PE_X × PE_Y = 8 × 12` is
derived from the reported throughput: 96 PEs × 16 weight applications per cycle
matches about 187 GOPS at 122 MHz, and about 2000 cycles for the four
pointwise layers. The split into 8 columns and 12 rows is this design's choice.
The DS-CNN pointwise layers fit the default buffers, using 250 input words and
250 output words.

Two further design points use `M = 16` (a ResNet) and `M = 8` (a MobileNet).
They are elaboration-time parameters: `wmd_accel #(.M(16), .PE_X(4), .PE_Y(4))`
and `#(.M(8), .PE_X(4), .PE_Y(11))`. The default build (`M = 4`) does not run
those networks' layers as decomposed at those points. `tb_wmd_design_points`
simulates both builds, each on one layer at its network's real size:

- `M = 16`: a 3 × 3 convolution over a 32 × 32 map whose input fills the
  input buffer.
- `M = 8`: a 12 × 12 pointwise layer over two input tiles.

Capacity is set by the buffer depths, which are parameters. An assertion
checks at `start` that the layer's input tiles, output tiles and weight sets
fit. A larger layer must be split by the host. The deepest
MobileNet pointwise layer (256 → 256 channels) built with `M = 8` on the
8 × 12 grid needs 288 weight-buffer words. That is more than the default
`W_DEPTH = 256`.

## 8. What follows the published description and what is this design's own

These parts follow the published description:

- The decomposition into `F_0` and `P-1` `F_gen` factors with `±2^-k` coefficients.
- Right shifts only.
- The `F_0` block without column indices.
- The diagonal optimisation with `E-1` coded elements per `F_gen` row.
- A shift unit plus input multiplexer per element, with adder trees.
- `F_0` and `F_gen` as the only two hard blocks, `F_gen` time-multiplexed for
  `P > 2`, giving the `Lat_F = P-1` factor.
- Inputs shared down columns and partial sums reduced along rows through `M`
  adders per PE.
- Results summed with those of earlier passes into an output buffer.
- The folding of large layers into passes.
- The default `P, Z, E, M, S_W`.

These are this design's own choices:

- **Shift set.** The text speaks of `Z` predefined shift values, while the
  decomposition example prints shifts `0,1,2,3` for `Z = 3`. The RTL
  implements `Z+1` shift amounts (`0 … Z`).
- **Pipelining.** The text says `F_0` and `F_gen` together take one cycle, and
  the PE figure draws a register between them. The RTL has that register. The
  throughput is still one vector per cycle for `P = 2`, but the PE latency is
  `P+1` cycles.
- **Number of `F_gen` shift units per row.** The PE drawing labels the shift
  units up to `E`, while the text (and the resource model) uses `E-1` units
  plus the hardwired diagonal. The RTL follows the text.
- **Everything around the array**, which the description does not give:
  - skew and deskew registers
  - the controller and its loop order
  - LOAD/DRAIN phases with weights loaded only into an idle array
  - code layouts, buffer organisation and depths
  - the tag FIFO
  - the host interface
  - the accumulator pipeline
  - widths beyond the 8-bit activations
  - the `P_MAX = 3` limit
  - rounding towards −∞ in the shifts
- **Grid sizes** are derived from the reported performance, not given.
- **Not built:**
  - the host processor and the FPGA block RAM primitives (the memories are
    plain arrays)
  - the offline decomposition search
  - requantisation between layers

## 9. Verification

Every block has a self-checking testbench. Each compares against an
independent model: a bit-exact reference of the PE arithmetic in
`tb/wmd_ref_pkg.sv`, built from integer floor division rather than shifts, and
schedule models written directly from the loop nest.

| testbench | what it covers |
|---|---|
| `tb_shift_unit` | all operands × all codes |
| `tb_f0_block`, `tb_fgen_block` | random codes and vectors, including the extremes |
| `tb_wmd_pe` | cycle-exact output timing and value for `P = 2` and `3`, back-to-back vectors, reloads |
| `tb_systolic_array` | a 3 × 2 array: latency, alignment, reduction, inputs with random gaps no shorter than `Lat_F` |
| `tb_input_buffer`, `tb_weight_buffer` | read/write against a memory model |
| `tb_output_accumulator` | first/accumulate, back-to-back forwarding, host reads |
| `tb_wmd_controller` | every read address, zero flag, tag and load, cycle by cycle, against the loop nest |
| `tb_wmd_accel` | whole design at its default size: four layers covering pointwise, 3 × 3 with padding, stride 2, `P = 3`, two input and two output tiles |
| `tb_wmd_design_points` | the `M = 16` and `M = 8` builds on one full-size layer each (via `wmd_accel_harness`) |

The end-to-end tests count each mechanism and fail if any never occurs:
accumulating passes, padding pixels, `P = 2` and `P = 3` layers, and more than
one output tile. They also check the pixel spacing and the streaming-cycle
count against the latency model.

To simulate with Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/wmd_pkg.sv tb/wmd_ref_pkg.sv tb/tb_wmd_accel.sv \
        --top-module tb_wmd_accel -Mdir obj_tb
    ./obj_tb/Vtb_wmd_accel

Replace `tb_wmd_accel` with any other testbench name. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Each also runs with
every register starting at a random value, because reset covers all state that
is read.

## 10. Parameters (`wmd_accel`)

| parameter | default | meaning |
|---|---|---|
| `ACT_W` | 8 | activation width |
| `S_W` | 4 | slice width, input channels per PE |
| `M` | 4 | output channels per PE (rows of an `F` matrix) |
| `E` | 3 | non-zeros per `F_gen` row (one of them the fixed diagonal) |
| `Z` | 3 | largest right shift |
| `P_MAX` | 3 | deepest decomposition the PE registers hold |
| `PE_X`, `PE_Y` | 8, 12 | array columns and rows |
| `ACC_W` | 32 | output-buffer element width |
| `IN_DEPTH`, `W_DEPTH`, `OUT_DEPTH` | 1024, 256, 1024 | buffer depths in words |

Changing `M`, `S_W`, `E`, `Z` or `P_MAX` changes the code widths and the
weight-buffer word width. The host must then pack codes to the layout in
section 1, with `COEF_W = M·S_W·(2+SH_W) + (P_MAX-1)·M·(E-1)·(1+SH_W+IDX_W)`.
