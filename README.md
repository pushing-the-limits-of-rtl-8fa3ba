# DBFP Softmax engine

Softmax is hard to do in narrow hardware. It needs a row maximum, an
exponential per element, a sum over the row and a division per element.
Floating-point units for all of that are large and slow. This RTL computes
Softmax over a whole attention row with integer adders, shifters and small
tables only. It does this with **DBFP** (dynamic block floating point):
every element of a block shares one exponent and keeps only a small
integer mantissa.

Shared exponents help at three places:

* **Subtraction.** Once a row shares one exponent, `x - max(x)` is a plain
  integer subtraction.
* **Exponential.** The distances `max(x) - x` are grouped under a second
  shared exponent, chosen by a *pivot* (the median). A small table of
  `exp()` values indexed by the top 7 bits of each distance then serves
  the whole row. The table for that exponent is loaded on demand. This
  is the *DH-LUT* (dynamic hierarchical look-up table).
* **Sum and division.** All table values share one exponent, so the
  denominator is an integer sum. Every lane divides by the same number,
  so the reciprocal is looked up once per 64 lanes. Each lane then needs
  only a shift-and-add multiply.

The architecture follows the Softmax engine of *Pushing the Limits of BFP on
Narrow Precision LLM Inference* (DB-Attn, AAAI 2025): its four stages, its
block names and its main sizes. That paper gives the blocks and what each
one does, but almost nothing of the number formats, the table contents or
the timing. Those are this design's own choices. Each one is marked below
and in the header of each file.

## Pipeline

```
            +-----------------+   +--------------------+   +----------------------------+   +-----------+
in_x[N] --->| Max             |-->| SE                 |-->| Exp                        |-->| Div       |--> out_mant[N]
FP16        | round_comp_unit |VB1| seu -> dbfp_sub    |VB2| dh_lut  hit_bitmap         |VB3| dbfp_div  |VB4 out_exp
            +-----------------+   +---------+----------+   | dbfp_adder_tree            |   +-----------+
                                            | ecode        +------------^---------------+
                                            +--------> dma ------------+ (sub-LUT load)
                                                        |  mem_req / mem_rsp
                                                        v
                                                 system memory
```

There are four stages: **Max**, **SE** (shared exponent and subtraction),
**Exp** (exponential and sum) and **Div**. A `vector_buffer` register
(VB1 to VB4) follows each stage. Each stage takes one clock cycle. With no
stall, the pipeline takes one whole N-element vector per cycle. A vector
accepted at clock edge *t* is handed out at edge *t+4*.

Default size: `N = 1024` lanes, so one 1024-score attention row is one
vector. This is read from the paper's hardware evaluation: it tests
1024-length sequences and claims 128 times the bandwidth of 8-input
designs. Any `N >= 2` elaborates.

## Number formats through the pipeline

This is the part to understand before changing anything.

| where | format | scale |
|---|---|---|
| input `in_x[i]` | IEEE FP16; subnormals handled, Inf/NaN treated as large numbers | |
| after `seu` (`p[i]`, `pmax`) | signed 12-bit integer; FP16 mantissa (hidden one + 10 bits) shifted right by `emax - e_i`, rounded half-up | `x = p * 2^(emax-25)` |
| after subtraction `d[i]` | `pmax - p[i]`, unsigned 12 bits, always >= 0 | same as `p` |
| DH-LUT index `q[i]` | `d[i]` shifted by `sh = pivot + 1 + PIVOT_HR - 7`, rounded, saturated at 127 | `d ~= q * 2^E` with `E = emax - 25 + sh` |
| sub-LUT code `ecode` | `E + 32`, 6 bits | names the table that is needed |
| table value `v` | unsigned 10 bits | `exp(-d) ~= v * 2^-10` |
| denominator `sum` | sum of all `v`, `10 + clog2(N+1)` bits, exact | `2^-10` |
| output `out_mant[i]`, `out_exp` | 10-bit mantissas, one signed 6-bit exponent | `prob[i] ~= out_mant[i] * 2^out_exp` |

Here `emax` is the largest exponent in the vector and `pivot` is the median
of `floor(log2 d[i])` over the lanes. `pivot` is found with a histogram:
it is the first bin whose running total reaches `ceil(N/2)`.

**The first shared exponent is the largest exponent.** The SEU aligns the
row to the largest element exponent. That is vanilla BFP, and it is exact
for the subtraction that follows. The paper says the row is aligned to the
maximum. Using the largest *exponent*, rather than the exponent of the
maximum *value*, stops very negative elements from overflowing.

**The second shared exponent is the pivot.** Median alignment is the
paper's *pivot-focus* policy. It keeps fine resolution for distances near
the middle of the row. Distances above `2^(pivot+1+PIVOT_HR)` saturate at
entry 127, where `exp()` is already small. `PIVOT_HR = 0` was chosen because
it gave the smallest measured error. With 2 headroom bits, resolution near
`d = 0` became too coarse.

**Weak case.** When more than half of a row equals its maximum, the median
distance is 0. The index resolution then becomes very fine and every
distant lane saturates. The result stays deterministic and matches the
reference model bit for bit, but it is far from the true Softmax. The
test keeps such a vector, and leaves it out of the accuracy figure.

## DH-LUT, its loading and the hit table

Storage:

* **Resident table.** `dh_lut` holds one sub-table: 128 entries of 10 bits,
  in registers.
* **System memory.** It holds every sub-table, at address `{ecode, q}`, with
  `value(ecode, q) = min(1023, round(exp(-q * 2^(ecode-32)) * 1024))`.
  Codes 4 to 45 can occur. Filling this memory is the system's job, and
  its contents are a design choice. The paper builds its tables offline
  with an optimal-partition search (its Algorithm 1). Uniform entries
  within each sub-table are the simplest version: the spacing across
  exponents is what makes the table hierarchical and non-uniform.

Loading (`dma`):

* The DMA keeps the code of the resident table as a tag.
* When the vector waiting in VB2 needs another code, the Exp stage stalls.
* The DMA issues 128 reads (valid/ready, one per cycle at most) and writes
  the in-order responses into `dh_lut`.
* After the last write the tag is valid again. The vector proceeds on the
  next cycle.
* With a memory latency of L cycles and no memory stalls, a miss costs
  128 + L + 1 cycles (132 with the test memory).
* Rows with the same `emax` and pivot reuse the table without any load.

The paper has the DMA *preload* the next table while the current one is
still being used. It does not say how many tables are resident, so this
design uses a single bank and blocks.

Hit table and denominator:

* `hit_bitmap` counts, for each of the 128 entries, how many lanes index
  it.
* `dbfp_adder_tree` multiplies each count by its entry and adds the 128
  products in a binary tree. No per-level exponent handling is needed.
* The numerators are read per lane from the same table.

The paper calls the hit table a *bitmap* of 0/1 bits. One bit cannot weight
an entry that several lanes share. So the block keeps counts, and the 0/1
bitmap is derived from them (it is the `lut_bitmap` output).

## Divider

`dbfp_div` handles the divisor once per group of `DIV_GROUP = 64` lanes.
This follows the paper's "one exponent subtraction and lookup per 64
divisions". For each group:

1. Normalise the divisor: `es` is the position of its leading one.
2. Look up a reciprocal using the 8 bits below the leading one. The table
   holds `rcp[j] = round(2^19 / (256 + j + 0.5))`, 11-bit values from 1025
   to 2044, built in SystemVerilog by a constant function.
3. For each lane, multiply the numerator by `rcp` with shifts and adds (one
   shifted copy of the numerator per set bit of `rcp`).
4. Round away 11 bits and saturate to 10 bits.

The output exponent is `-es`. The whole division is one combinational
stage, registered by VB4.

Quotient error is about 0.25% at most, plus one output LSB. The test checks
it against the exact ratio within 1% plus one LSB.

## Interfaces of the top, `dbattn_softmax`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (pipeline empty, no sub-table resident) |
| `in_valid`, `in_ready`, `in_x[N]` | in/out/in | FP16 row; transfer when valid and ready are high at an edge |
| `out_valid`, `out_ready`, `out_mant[N]`, `out_exp` | out/in/out | DBFP probabilities, same handshake |
| `mem_req_valid`, `mem_req_ready`, `mem_req_addr[12:0]` | out/in/out | sub-table reads `{ecode, entry}` |
| `mem_rsp_valid`, `mem_rsp_data[9:0]` | in | in-order read data, no back-pressure |
| `lut_loading` | out | a sub-table load is in progress |
| `sat_lanes`, `lut_bitmap[127:0]` | out | for the vector in the Exp stage: saturated lanes, entries hit |

Parameters: `N` (lanes, 1024) and `DIV_GROUP` (64). The shared widths and
constants are in `rtl/dbfp_pkg.sv`:

* `LUT_K = 7`, table index bits (from the paper)
* `VAL_W = 10`, table value bits (from the paper)
* `OUT_W = 10`, output mantissa bits (from the paper)
* `PIVOT_HR = 0`, index headroom (this design's choice)
* `RCP_IDX_W = 8` and `RCP_W = 11`, reciprocal table index and entry
  bits (this design's choice)

## Accuracy and what was verified

Every block has a self-checking testbench in `tb/`. Each one compares the
block with a model in `tb/dbfp_ref_pkg.sv`. That model is written
independently, using real arithmetic, sorting and plain loops, and it
reproduces every rounding step.

The end-to-end test, `tb_dbattn_softmax`, runs at the default `N = 1024`.
It streams 44 rows through the engine. Every output mantissa and exponent
matches the model bit for bit. The run covers:

* rows of several kinds: random scores over narrow and wide ranges,
  Gaussian scores, a constant row, an outlier, all-negative rows, zeros
  with subnormals, and the weak case above
* random input bubbles and output back-pressure
* 28 sub-table loads
* 16 back-to-back rows that all hit the resident table, each with the
  4-cycle latency

On the rows other than the weak case:

* the largest absolute error of a probability against double-precision
  Softmax is 0.019 at `N = 1024` and 0.015 at `N = 128` (`tb_softmax_n128`)
* probabilities sum to 1 within 3%

The paper's accuracy claims were measured with its own software emulation
on whole models. They were not reproduced here.

## Departures from the paper, in short

* **One row, one shared exponent.** The paper's software uses 128-element
  blocks along a row. Here the whole row of N elements is one block. With
  several blocks per row, each block would need its own pivot and its own
  resident table, and the paper describes neither.
* **No lane mask, no multi-pass mode.** A row must fill all N lanes. Other
  row lengths need `N` changed.
* **Hit counts, not a hit bitmap.** See the DH-LUT section.
* **Blocking table loads** with one resident table.
* **Adaptive grouping is not built.** The paper finds groups by iterative
  optimisation (its equations 2 to 6), an offline procedure. In this
  engine, grouping reduces to the two shared exponents above.
* **FP16 input only.** The figure allows FP16 or FP32.
* **No DBFP matrix-multiply unit.** The paper relies on prior BFP
  hardware for linear layers and describes no such unit.

## Files

| file | contents |
|---|---|
| `rtl/dbfp_pkg.sv` | widths, types, FP16 helpers |
| `rtl/round_comp_unit.sv` | Max stage: comparison tree for the maximum and the largest exponent |
| `rtl/seu.sv` | alignment to the shared exponent |
| `rtl/dbfp_sub.sv` | subtraction, median pivot, DH-LUT indices, sub-table code |
| `rtl/vector_buffer.sv` | valid/ready stage register |
| `rtl/dma.sv` | tag check and sub-table loader |
| `rtl/dh_lut.sv` | resident value table |
| `rtl/hit_bitmap.sv` | per-entry hit counts and bitmap |
| `rtl/dbfp_adder_tree.sv` | denominator |
| `rtl/dbfp_div.sv` | reciprocal-table, shift-add divider |
| `rtl/dbattn_softmax.sv` | top |
| `tb/dbfp_ref_pkg.sv` | reference model and FP16 helpers |
| `tb/lut_mem_model.sv` | system memory holding the sub-tables (behavioural) |
| `tb/tb_*.sv` | one testbench per block, two end-to-end |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and finishes. A
watchdog ends a hung run with a failure. From the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dbfp_pkg.sv tb/dbfp_ref_pkg.sv tb/tb_dbattn_softmax.sv \
  --top-module tb_dbattn_softmax -o sim
./obj_dir/sim
```

Use the same command for any other testbench, changing the file and the
`--top-module`. Verilator finds the other modules through `-Irtl -Itb`.

The full-size end-to-end test builds in about 15 seconds and runs in
about 2. The unit testbenches override `N` to 128 so they stay small.
Changing a width in `dbfp_pkg` means changing `tb/dbfp_ref_pkg.sv` to
match: it keeps its own copies of `K`, `VALW` and `HR`.
