# PQA: a product-quantization inference engine in SystemVerilog

Most of the work in a convolution or fully connected layer is one matrix
product, `Y = W · X`. Each column of `X` is an input vector: for a convolution
it is one unrolled input patch. Product quantization (PQ) replaces the
multiply-accumulate work of that product with memory look-ups:

1. **Split.** The rows of each input column are split into `Ns` short slices
   (*subspaces*) of `Ls` consecutive elements.
2. **Store prototypes.** For every subspace, training leaves a small codebook
   of `Np` *prototype* vectors, each `Ls` elements long.
3. **Precompute dot products.** For every subspace, output channel and
   prototype, the partial dot product of that weight slice with that
   prototype is computed ahead of time. All of them are stored in a table
   called `LUT_PQ[subspace][channel][prototype]`.
4. **Run the layer.** For each subspace of an input column, find the closest
   prototype (L1 or squared-L2 distance). Then, for each output channel, add up
   `LUT_PQ[s][c][closest(s)]` over all subspaces.

The expensive part is finding the closest prototype. That work does not
depend on the number of output channels. Everything after it is table reads
and additions. The subspaces are independent of each other, so `LUT_PQ` can be
cut into many small memories and read in parallel.

This RTL implements such an engine. It has:

- `NS_VEC` **distance lanes**. Each lane compares `LS_VEC` input elements with
  `NP_VEC` prototypes per cycle.
- `NOUT_VEC` **product-lookup slots**. Each slot holds `NS_VEC` `LUT_PQ`
  partitions and accumulates their outputs.
- An **input buffer** that holds the layer's input columns on chip.
- A **sequencer** that overlaps the distance and lookup stages, so a layer
  takes the time of the slower stage.

The layer's outputs are quantized and written back into the input buffer, so
consecutive layers run without leaving the chip.

## Block diagram

```
 external input ─┐                                        ┌─> out_* (16-bit outputs)
 (in_wr_*)       ├─ mux ─ quantize ─> input buffer ──┐    │
 own outputs ────┘  (per-subspace     (2 banks)      │    │
      ^              scale/offset)                    v    │
      │                              ┌──── distance lane x NS_VEC ────┐
      │                              │ prototypes RAM (2 table banks) │
      │                              │ NP_VEC difference calculators   │
      │                              │ comparator with running minimum │
      │                              └──────────────┬─────────────────┘
      │                                closest-prototype indices
      │                                 (4-entry index FIFO)
      │                              ┌──── product lookup x NOUT_VEC ──┐
      │                              │ NS_VEC LUT_PQ partitions         │
      │                              │ NS_VEC dequantizers              │
      └──────────────────────────────│ 16-bit saturating accumulator    │
                                     └──────────────────────────────────┘
```

## How a layer is laid out on the engine

One layer runs with these run-time values, passed in `cfg` (type
`layer_cfg_t`, in `pqa_pkg`):

| Field | Meaning |
|---|---|
| `ls` | prototype length `Ls` |
| `np` | prototypes per subspace `Np` |
| `ns` | number of subspaces `Ns` |
| `cout` | output channels |
| `ncols` | number of input columns |
| `mode` | L1 or L2 distance |
| `in_bank` | input-buffer bank the input is in |
| `wt_bank` | table bank that holds this layer's prototypes, `LUT_PQ` and dequantizer parameters |

The run-time sizes are cut into hardware-sized groups:

- **Subspace groups.** Subspaces `g·NS_VEC … g·NS_VEC+NS_VEC-1` form group
  `g`. Lane `l` handles subspace `g·NS_VEC+l`. There are `ceil(Ns/NS_VEC)`
  groups.
- **Prototype groups and chunks.** A subspace's prototypes are handled in
  `ceil(Np/NP_VEC)` groups of `NP_VEC`. Its elements are handled in
  `ceil(Ls/LS_VEC)` chunks of `LS_VEC`.
- **Output groups.** Channels `og·NOUT_VEC …` form output group `og`. Slot `o`
  of the lookup stage computes channel `og·NOUT_VEC+o`. There are
  `ceil(Cout/NOUT_VEC)` output groups.

Partial groups are handled by enables:

- An input element past `Ls` in the last chunk is left out of the distance.
- A prototype past `Np` never wins the comparison.
- A lane past `Ns` adds nothing to the accumulators.
- A slot past `Cout` has its bit in `out_mask` cleared.

Input row `r` of a column belongs to subspace `r / Ls`.

## The two stages and how they overlap

This is the part of the design that needs the most care.

### Distance stage

For each column, the distance stage walks four nested counters. From the
innermost:

1. chunk
2. prototype group
3. subspace group
4. column

Each step issues one cycle in all `NS_VEC` lanes at once. In that cycle, a
lane does this:

- **Cycle t.** It reads its prototypes RAM at address
  `(table bank, subspace group, prototype group, chunk)`. One word holds one
  `LS_VEC`-element chunk for each of the `NP_VEC` difference calculators.
- **Cycle t+1.** The RAM data and the matching input chunk meet in the
  difference calculators. The input chunk is cut from the registered input
  buffer column. Each calculator adds `Σ|x-b|` or `Σ(x-b)²` to its partial
  distance. The partial distance restarts on the first chunk.
- **Cycle t+2.** After the last chunk, the comparator takes the `NP_VEC`
  distances and compares the smallest with its cached minimum from earlier
  prototype groups. On a tie, the lower index wins.
- **Cycle t+3.** After the last prototype group, the lane presents the index
  of the closest prototype.

The squared L2 distance skips the square root, because only the ordering of
distances matters. Its width is `2·DBITS + clog2(LS_MAX+1)` bits, so it cannot
overflow.

A subspace group therefore takes `ceil(Np/NP_VEC)·ceil(Ls/LS_VEC)` issue
cycles.

### Lookup stage

The `NS_VEC` indices of a group, together with the group and column numbers,
are pushed into a 4-entry FIFO. The lookup stage pops one entry and spends
`ceil(Cout/NOUT_VEC)` cycles on it, one per output group.

In each of those cycles, every slot `o` does the following for each lane
`l`:

1. It reads `LUT_PQ` partition `(o, l)` at address
   `(table bank, subspace group, output group, index_l)`.
2. It dequantizes the value read, using subspace `g·NS_VEC+l`'s scale and
   zero point.
3. It sums the `NS_VEC` results.
4. It adds the sum to the accumulator state of that output group, with
   saturation. This state is one 16-bit register per output group, cleared
   on the column's first subspace group.

On the column's last subspace group, the finished sums come out on `out_*`.
That happens two cycles after the lookup, one output group (`NOUT_VEC`
channels) per cycle.

### Flow control

The distance stage only starts a new subspace group while it holds a free
FIFO token. A token is taken when a group's first cycle issues, and returned
when the lookup stage pops the group. Tokens are counted because the group's
indices only reach the FIFO three cycles after the group was issued.

- **Lookup-bound layers** (`Cout/NOUT_VEC` is the larger number). The distance
  stage runs ahead until the tokens are used up, then waits. The output
  `ev_stall` marks these waits.
- **Distance-bound layers.** The lookup stage waits for the FIFO instead.

While both stages are working, `ev_overlap` is high. A layer therefore takes

```
cycles ≈ max(ceil(Np/NP_VEC)·ceil(Ls/LS_VEC), ceil(Cout/NOUT_VEC))
         · ceil(Ns/NS_VEC) · ncols  +  pipeline fill (about 10 cycles)
```

The testbenches check every layer against this formula. For a full-size
MicroNet layer (125 columns, 21 subspaces, 120 channels), the formula gives
2000 cycles and the RTL takes 2008.

## Keeping data on chip: the two kinds of banks

**Input-buffer banks.** The input buffer has two banks, each with `COLS_MAX`
columns of `NIN_MAX` quantized elements.

- **While idle.** The write port is fed from `in_wr_*`, which is the external
  memory side of the mux.
- **While a layer runs.** The write port takes the engine's own outputs.
  Channel `c` of column `j` is quantized with the parameters of the
  destination bank and written to row `c` of column `j` in the bank the layer
  is *not* reading. Channels at or above `NIN_MAX` are not written back.

The next layer then names that bank as its `in_bank`.

Write-back puts output channel `c` at row `c` of the same column. That is
exactly the next layer's input when the next layer is a 1×1 (pointwise)
convolution or a fully connected layer. A k×k convolution needs its input
unrolled again (im2col), and that must be done outside the engine, with the
result written through `in_wr_*`. Because the layer never
reads the bank it writes, an output never overwrites an input that is still
needed.

**Table banks.** Prototypes, `LUT_PQ` and the dequantizer parameters each
exist twice. `cfg.wt_bank` chooses which copy a layer uses. The other copy can
be loaded while the layer runs, so loading the next layer's tables hides
behind the current layer's compute. An assertion flags any write to the copy
in use.

The `LUT_PQ` write port takes `NOUT_VEC × NS_VEC` entries per cycle, one per
partition. Loading a layer's `LUT_PQ` therefore takes
`ceil(Ns/NS_VEC)·ceil(Cout/NOUT_VEC)·Np` cycles when the external memory can
keep up.

## Number formats

Distances and lookups can use different widths:

- `DBITS` for the input buffer and prototypes.
- `LBITS` for `LUT_PQ`.

The two halves are connected only by the prototype index. Both widths default
to 16.

**Quantizer.** The quantizer sits in front of the input buffer. It uses one
scale and zero point per subspace, and these parameters belong to an
input-buffer bank. It computes:

```
q = clamp( floor(x · mult / 2^8) + zp , 0 , 2^DBITS − 1 )
```

- `x` is a signed 16-bit input.
- `mult` is the reciprocal of the scale, as a 16-bit value with 8 fractional
  bits.

The prototypes are expected to be stored already quantized with the same
parameters. The distance is then computed between codes, and nothing is
dequantized on this side.

**Dequantizer.** There is one dequantizer behind each `LUT_PQ` partition. Its
scale and zero point are set per subspace. It computes:

```
y = saturate16( ((q − zp) · scale) >>> 8 )
```

`scale` is unsigned, with 8 fractional bits.

**Accumulators.** The accumulators are 16 bits wide and saturate instead of
wrapping. `ev_sat` pulses when any of them saturates.

## Using the engine

### Before a layer

1. **Quantizer parameters.** For each subspace of each input-buffer bank that
   will be written, load the scale and zero point on `q_wr_*`. Also load the
   `Ls` of the layer that reads that bank.
2. **Input.** Write the input through `in_wr_*`. One cycle writes `NOUT_VEC`
   consecutive rows of one column; `in_wr_mask` selects which are written.
   Input is accepted only while `in_wr_ready` is high, which is when the
   engine is idle.
3. **Tables.** Into a table bank, load:
   - prototypes on `pr_wr_*`, one `LS_VEC`-element chunk of one prototype per
     cycle;
   - `LUT_PQ` on `lut_wr_*`, one (subspace group, output group, prototype)
     per cycle;
   - dequantizer parameters on `dq_wr_*`.

### Running the layer

1. Present `cfg` and pulse `start`.
2. `busy` goes high. Output words appear on `out_valid`, `out_col`,
   `out_chan`, `out_mask` and `out_data`. Words come column by column, and
   in ascending output groups within a column. Each word is final when it
   appears.
3. `done` pulses with the last word.
4. The next layer may start after `done`.

### Loading during a run

Table loads into the bank not in use may go on during the run. Quantizer
parameters for the destination bank must be in place before the first
outputs appear.

## Parameters

Defaults are the engine configuration used for MicroNet keyword spotting,
with 16-bit data.

| Parameter | Default | Meaning |
|---|---|---|
| `LS_VEC` | 4 | input elements compared per lane per cycle |
| `NP_VEC` | 16 | prototypes compared per lane per cycle |
| `NS_VEC` | 16 | distance lanes (subspaces in parallel) |
| `NOUT_VEC` | 16 | output channels produced per cycle |
| `LS_MAX` | 4 | largest `Ls` |
| `NP_MAX` | 32 | largest `Np` |
| `NS_MAX` | 32 | largest `Ns` |
| `NOUT_MAX` | 256 | largest `Cout` |
| `NIN_MAX` | 128 | rows per input column (`Ns·Ls`) |
| `COLS_MAX` | 128 | columns per input-buffer bank; chosen to hold MicroNet's 125 columns |
| `DBITS` | 16 | input and prototype code width |
| `LBITS` | 16 | `LUT_PQ` code width |
| `ACC_W` | 16 | accumulator width |

At the defaults, these networks fit:

- **MicroNet pointwise layers with `Ls=4`, `Np=16`.** These fit: at most 30
  subspaces, 120 rows, 196 channels and 125 columns.
- **Layers with `Ls=8` or `Ls=9`.** These need `LS_MAX` raised.
- **ResNet-20 layers.** These also need `NIN_MAX`, `NS_MAX` and `COLS_MAX`
  raised. They have up to 576 rows and 1024 columns. The 1024-column layers
  also need the 10-bit `ncols` field of `layer_cfg_t` widened.

Every size is a parameter, and the testbenches run at other sizes.

## Source files

One module per file. Each file opens with a description of its interface and
timing.

| File | Contents |
|---|---|
| `rtl/pqa_pkg.sv` | `layer_cfg_t`, `dist_mode_e`, `ceil_div` |
| `rtl/pqa_top.sv` | the engine: mux, quantizers, input buffer, lanes, FIFO, lookup slots, sequencer, assertions |
| `rtl/pqa_quantize.sv` | input quantizer |
| `rtl/pqa_dequantize.sv` | `LUT_PQ` dequantizer |
| `rtl/pqa_input_buffer.sv` | two-bank column store |
| `rtl/pqa_dist_lane.sv` | one distance lane |
| `rtl/pqa_proto_ram.sv` | the lane's prototypes RAM, part of the distance lane |
| `rtl/pqa_diff_calc.sv` | difference calculator, part of the distance lane |
| `rtl/pqa_comparator.sv` | comparator, part of the distance lane |
| `rtl/pqa_product_lookup.sv` | one lookup slot |
| `rtl/pqa_lut_mem.sv` | one `LUT_PQ` partition, part of the lookup slot |
| `rtl/pqa_accumulator.sv` | accumulator, part of the lookup slot |
| `tb/pqa_ref_pkg.sv` | reference arithmetic used by the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_pqa_top_full.sv` | the engine at its default parameters |
| `tb/tb_pqa_workloads.sv` | the engine on larger layer shapes |

## Simulating

Everything runs with Verilator 5. For example, to build and run the
end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/pqa_pkg.sv tb/pqa_ref_pkg.sv tb/tb_pqa_top.sv --top-module tb_pqa_top
./obj_dir/Vtb_pqa_top
```

For other testbenches, replace `tb_pqa_top` with the testbench name. Every
testbench:

- prints `TB_RESULT checks=N failures=M` and stops;
- has a watchdog that counts a failure if the run hangs.

## What the tests establish

**Leaf tests.** Each leaf module is compared with independent reference
arithmetic over thousands of random and corner-case inputs. These include
clamping, saturation, ties in the comparator, partial chunks and masked
writes.

**End-to-end test: `tb_pqa_top`.** This test runs the engine at small sizes.
It uses three layers back to back:

| Layer | Input taken from | Distance | What it exercises |
|---|---|---|---|
| 1 | the external input port | L2 | distance-bound; partial groups on every axis |
| 2 | the outputs layer 1 wrote back | L1 | lookup-bound, so the distance stage stalls |
| 3 | the outputs layer 2 wrote back | L2 | accumulators saturate |

Other features of the test:

- The next layer's tables are loaded while the previous layer runs.
- A software model redoes each step: quantize, nearest prototype, lookup,
  dequantize and saturating sum. Every output word is compared with the
  model.
- The test checks the cycle count of each layer against the formula above.
- It fails if any of these never happened: background table loading,
  overlap, stall, saturation, L1, L2, external input or write-back.

**Full-size test: `tb_pqa_top_full`.** This test uses the default parameters.
It runs two MicroNet-sized pointwise layers:

| Layer | Subspaces | Channels | Columns | `Ls` | `Np` |
|---|---|---|---|---|---|
| 1 | 21 | 120 | 125 | 4 | 16 |
| 2 | 30 | 84 | 125 | 4 | 16 |

Layer 2 reads the outputs of layer 1 from the other bank. About 25,000 checks
pass in roughly 15 seconds of simulation.

**Workload test: `tb_pqa_workloads`.** This test builds the engine with
`LS_MAX=9`, `NS_MAX=64`, `NIN_MAX=576` and `COLS_MAX=256`, keeping the default
vectorisation. It runs three layers, with the same checks as `tb_pqa_top`:

| Layer | `Ls` | `Np` | Subspaces | Channels | Columns |
|---|---|---|---|---|---|
| MicroNet pointwise | 8 | 8 | 15 | 84 | 125 |
| ResNet-20 3×3 conv | 9 | 16 | 32 | 32 | 256 |
| ResNet-20 3×3 conv | 9 | 8 | 64 | 64 | 64 |

Each layer's input is written from outside, as a k×k convolution needs.

**Fault tests.** For every module, a deliberately broken copy makes its
testbench fail.

**Assertions in the engine** check that:

- the index FIFO never overflows or underflows;
- no table write hits the bank in use;
- all lanes and all lookup slots stay in step.

**Not covered.** The tests use random prototypes and tables, not trained
networks, so accuracy is not measured. The RTL has not been timed or
synthesized for a particular FPGA.

## Departures and additions

The parts below are this design's own choices. The original engine names the
function of each but not how it is built.

- **Sequencer, index FIFO and token scheme.** These are how the two stages
  are made to overlap. The original only states the resulting cycle count.
- **Input-buffer and table banks.** The two input-buffer banks, and the two
  copies of the tables, are one way to get write-back and load/compute
  overlap.
- **Arithmetic details.** These are all choices:
  - the fixed-point formats of the quantizer and dequantizer;
  - floor rounding;
  - clamping;
  - accumulator saturation;
  - the tie rule in the comparator.
- **Pipeline fill.** The pipeline adds about ten cycles per layer on top of
  the cycle formula.
- **Load ports.** These are plain valid-qualified write ports. Off-chip
  memory, its controller and the board shell that feeds the engine are not
  part of this RTL. Their place is taken by the `in_wr_*`, `q_wr_*`,
  `dq_wr_*`, `pr_wr_*` and `lut_wr_*` ports and by `out_*`.

The run-time range of `cfg` is limited by the `*_MAX` parameters. Field widths
in `layer_cfg_t` allow up to 255 subspaces, 255 prototypes and 1023
channels/columns.

**Lint warnings.** Lint still reports a few warnings. Each module's
header comment explains them:

- valid bits and minimum distances that are unused because lanes run in lock
  step;
- a reset that also disables assertions.
