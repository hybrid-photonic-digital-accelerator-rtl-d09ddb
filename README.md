# HyAtten: hybrid photonic-digital attention accelerator in SystemVerilog

Photonic tensor cores compute a dot product in one pass of light. A photonic
accelerator therefore spends most of its area and energy on the converters
around the optics rather than on the optics themselves. The costliest converters
are the high-resolution ADCs that read the photocurrents. This design reads
every photocurrent with a **4-bit ADC**. Most attention-score partial products
fit in 4 bits, so this is enough most of the time.

Each ADC lane has an **analog comparator** that flags a current the ADC cannot
represent. The flagged output's coordinate is written to a **coordinate
register** instead of being converted. A memory controller later fetches the
two digital operand vectors of each flagged output. A small **digital PE** on a
digital die recomputes that dot product exactly, and the result is merged back.
The outcome is exact integer scores, while only about one output in ten (with
random data) takes the slow digital path. A digital **softmax unit** then turns
each row of scores into probabilities. Its exponential uses two small lookup
tables and a multiplier.

The RTL models the whole chip. The optical and analog parts are behavioural
models (`real`-valued). Everything digital is synthesizable SystemVerilog:
- memories
- accumulators
- coordinate logging
- digital PE
- softmax
- controller

## 1. Why the results are exact

Everything below hangs on this argument.

**Operands.** Q and K are quantised to signed 4-bit integers (−8..7). One
shared-SRAM word of 256 bits holds 64 of them, one *chunk* of a head dimension.

**Photocurrent.** A tensor-core output is the integer dot product of two
64-element chunks, so it can lie anywhere in −3584..4096. The model scales the
current so that one unit of current is one unit of dot product.

**ADC.** The ADC rounds to the nearest integer and clamps to −8..7.

**Comparator.** The comparator window is [−8.5, 7.5]. That is exactly the set of
currents the ADC rounds to an unclamped code. Inside the window the dot product
is an integer, so the ADC code equals it exactly. Outside the window the lane is
flagged and its code is ignored.

**Accumulation.** Head dimensions longer than 64 are split into chunks. The
accumulators add each chunk's in-range codes into a 64×64 output register (OR).

**Repair.** Every flagged (chunk, row, column) is recomputed by the digital PE
from the digital operands. The exact value is added into the same OR cell. The
repair is done after every chunk, so the coordinate register never has to hold
more than one array's worth of outputs (4096 entries of 16 bits = 8 KB).

So every OR cell ends up holding Σ over chunks of the exact partial dot product,
which is the exact integer score. Noise-free optics is assumed. With real noise,
the comparator window would need a guard band; the rest of the scheme is
unchanged.

## 2. Chip organisation

```
 off-chip --hbm_wr_*--> shared SRAM (2 MB, 65536 x 256 b) ---+
                                                             |   controller (hyatten_ctrl)
                         shared PDAC (64 x 64 amplitudes) ---+-- broadcast to all tiles
                                                             |
 tile t (t = 0..31)                                          v
  photonic PE:  local SRAM (32 KB) -> local PDAC -> 64x64 DPTC -> 32 x {comparator, 4-bit ADC}
                                                      -> 32 accumulators -> OR (64x64 x 24 b)
                                                      -> coordinate register (4096 x 16 b)
  digital die:  SRAM (4096 x 256 b) <-> digital PE (queue, decoder, input buffers, MAU, output buffer)
                                    -> softmax unit (max, minus, 2 exp tables, multiply, sum, divide)
 results --out_valid/out_row/out_col/out_prob|out_score--> off-chip
```

The shared SRAM and shared PDAC are one per chip. Each tile has one photonic PE
and one digital die.

| Module | Role |
|---|---|
| `hyatten_pkg` | Shared sizes and types. |
| `hyatten_top` | Wires the chip and arbitrates the shared-SRAM port (off-chip writes only while idle). |
| `hyatten_ctrl` | Sequencer and memory controller. |

## 3. A job, step by step

**Inputs.** With the chip idle, the host writes the data into the shared SRAM
through `hbm_wr_*`. Q row r, chunk c goes at word `q_base + r*chunks + c`. Key n,
chunk c goes at `k_base + n*chunks + c`.

**Configuration.**
- `cfg_q_blocks`: the number of 64-row blocks of Q.
- `cfg_k_tiles`: the number of tiles used.
- `cfg_batches`: the number of 64-key shards each tile keeps in its local SRAM. The keys form batches of bw = 64·`cfg_k_tiles`. In batch b, tile t owns keys b·bw + 64t .. +63. A job therefore covers `cfg_batches`·bw keys, up to 4094 (the digital-die row buffer). The local SRAM must hold `cfg_batches`·64·`cfg_chunks` ≤ 1024 words.
- `cfg_chunks`: the head dimension in chunks, up to 16.
- `cfg_softmax`: selects the output mode.

A pulse on `start` runs the job. The states and their cycle costs:

1. **DIST.** Copies every key chunk into its tile's local SRAM. This costs one cycle per word: keys × chunks.
2. For every Q block, rows are handled in **groups of NT**, one row per digital die (row r uses die r mod NT). For each group, for each batch b, and for each chunk:
   - **LOAD** (64 cycles). Streams the block's 64 Q vectors through the shared PDAC, which broadcasts them. Each tile loads its 64 key vectors into its local PDAC in the same cycles.
   - **FIRE** (1 cycle). All tensor cores latch their 4096 currents together.
   - **READ** (128 cycles). Group g feeds row g/2, columns (g mod 2)·32..+31, through the 32 comparator/ADC lanes.
     - In-range codes accumulate.
     - Flagged lanes append `{chunk, row, col}` to the coordinate register. All flagged lanes of a cycle are appended in that one cycle.
   - **OVER.** Tile by tile, the controller processes each logged coordinate:
     1. Reads the Q and K vectors from the shared SRAM.
     2. Writes them to words 0 and 1 of the tile's digital-die SRAM.
     3. Gives that SRAM port to the digital PE.
     4. Issues `LDA 0, LDB 1, MAC, ST tag`.
     5. Adds the returned value into the OR cell named by the tag.

     Each entry costs about a dozen cycles. The coordinate registers are then cleared.
3. After the last chunk of batch b, for each row r of the group:
   - **COPY** (one cycle per key of the batch). Reads the row from the tiles' ORs and writes it into the SRAM of digital die r mod NT, from word 2 + b·bw on.
4. After the last batch, for each row of the group:
   - **STREAM** (three passes over the whole row). Feeds the row into its die's softmax unit. Probabilities leave on `out_*` one per cycle in the third pass.
5. `done` pulses for one cycle.

**Cost of row groups.** The OR holds only the current batch, and each die buffers one row. So the photonic and repair work of a block is repeated once per row group: twice with 32 tiles. This keeps the digital-die buffer at one row.

**Measured run.** The default size is 32 tiles, one Q block, 2048 keys and one
chunk, with random data of about 25 % non-zero operands. A job at that size
takes about 881 k cycles, and 14747 of the 131072 outputs were over range. The copy and softmax passes dominate:
64 rows × 4 × 2048 cycles.

**Plain-product mode.** With `cfg_softmax = 0` the job computes A × Bᵀ and
sends the exact integer results on `out_score` during COPY. No softmax runs.
This is how S × V runs: S quantised to 4 bits by the host is A, and Vᵀ is B.
The controller does not quantise S itself (see section 7).

## 4. Photonic PE readout details

`photonic_pe` has the following timing, all driven by the controller:
- A local-SRAM read returns one cycle later. `lp_load` loads the returned vector into the local PDAC vector `lp_idx` one cycle after the read is issued.
- `fire` latches the currents.
- Comparator flags and ADC codes are sampled on the `rd_valid` edge. They are accumulated or logged on the next edge. A group's effect is therefore visible two edges after it is issued.
- The OR is read combinationally (`or_rd_row/col`).
- Corrections arrive on `corr_*`.
- The coordinate register is read combinationally by index. It has a sticky `overflow` flag, which an assertion in the top requires to stay low.

## 5. Digital die

### Digital PE

The digital PE (`digital_pe`) has an 8-entry instruction queue. The decoder
takes one instruction at a time:

| Instruction | Action | Cycles |
|---|---|---|
| `LDA a` | Read SRAM word a into input buffer A | 2 |
| `LDB a` | Read SRAM word a into input buffer B | 2 |
| `MAC` | acc += A·B through the MAU (64 signed 4-bit products in one cycle) | 1 |
| `ST tag` | Push {tag, acc} into the 8-entry output buffer and clear acc | 1 |

Results leave on a valid/ready handshake. The PE shares the die SRAM with the
controller through `pe_grant`. An assertion checks that the controller does not
access the SRAM while the PE has it.

### Softmax unit

The softmax unit (`softmax_unit`) has no row buffer. The row is streamed through
it three times:

1. The first pass takes the maximum m.
2. The second pass sums e(m − s).
3. The third pass outputs e(m − s)·2¹⁵ / sum.

The exponential is e(d) = exp(−d/16) in Q1.15. The shift d is split into an
upper and a lower 7-bit half:

  e(d) = (HI[d >> 7] · LO[d mod 128]) >> 15
  HI[k] = round(2¹⁵ · exp(−128k/16))
  LO[k] = round(2¹⁵ · exp(−k/16))

The result is 0 for d ≥ 2¹⁴. The two tables are 2 × 128 × 16 bit = 512 bytes.
They are computed at elaboration time, so no data file is needed. The 1/16 score
scale (FRAC = 4) stands in for the 1/√d_k and quantisation scales.

## 6. Behavioural models

These modules are behavioural models, not hardware:
- `pdac_bank`: a code becomes amplitude code × LSB, signed. This is a coherent scheme, so the sign is carried.
- `dptc_array`: ideal dot products over 64 wavelengths.
- `analog_comparator`
- `adc`

They have the ports a real macro would have: clocked load, fire and sample
strobes, and the analog value as `real`. Each can be replaced by a macro without
touching the digital logic. Yosys synthesis does not accept the `real` ports;
lint and simulation do. `sram_sp` is a plain array model of an SRAM macro.

## 7. Where this design departs from, or goes beyond, the architecture

The architecture description gives the block list, the sizes, the dataflow
order and the exponent-table idea. These choices are this design's own:

**Formats and encodings.**
- Signed operands and the ADC scaling.
- The comparator window.
- The 16-bit coordinate format.
- The 24-bit accumulators.
- The Q1.15 softmax formats.
- FRAC = 4.

**Sizes and layout.**
- The digital-die SRAM size (128 KB). None is listed for it.
- The instruction set and queue depths of the digital PE.
- The memory layout.
- The assignment of softmax rows to digital dies (row r → die r mod NT).

**Ordering and datapath.**
- Repairing after every chunk.
- Merging repairs into the OR rather than into a separate buffer.
- A serial repair path, one entry at a time.

**Gaps against the described architecture:**
- **S × V** is described only as "a similar procedure". How the probabilities are re-quantised to 4-bit operands is not given. Only the plain-product mode is provided, and it needs host-quantised S.
- **Row groups.** Batching of several key shards per tile is built, but a row's scores must fit one die buffer (4094 keys). The photonic work is repeated per row group of NT rows. Both are this design's choices; the architecture does not say where a full score row is buffered.
- **Off-chip memory** is not modelled. The HBM is the `hbm_wr_*` write port plus the result stream.
- **Padding.** Padded keys (for example DeiT's 197 tokens padded to 256) are not masked by the softmax.
- **Rate and latency.** Timing figures are not given at cycle level, so the testbenches check results, not a latency target.

## 8. Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `ARR` | 64 | Tensor-core size and chunk length |
| `DW` | 4 | Operand and PDAC resolution |
| `ADC_BITS` | 4 | ADC resolution |
| `N_ADC` | 32 | ADCs, comparators and accumulators per core |
| `N_TILES` / `NT` | 32 | Tiles |
| `SH_DEPTH` | 65536 | Shared SRAM depth: 2 MB of 256-bit words |
| `LOCAL_DEPTH` | 1024 | Local SRAM depth: 32 KB |
| `COORD_DEPTH` | 4096 | Coordinate register depth: 8 KB |
| `DD_DEPTH` | 4096 | Digital-die SRAM depth: 128 KB (own choice) |
| `ACC_W` | 24 | Accumulator and score width |
| `PROB_W` | 16 | Probability width |

## 9. Simulating

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. Each
has a watchdog. With verilator 5, a testbench is built and run like this:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/hyatten_pkg.sv rtl/hyatten_top.sv tb/tb_hyatten_top.sv \
    --top-module tb_hyatten_top -Mdir obj -o sim && obj/sim
```

The unit testbenches cover each block against independently computed values:
- `tb_sram_sp`
- `tb_pdac_bank`
- `tb_dptc_array`
- `tb_analog_comparator`
- `tb_adc`
- `tb_coord_register`
- `tb_accum_or`
- `tb_photonic_pe`
- `tb_mau`
- `tb_digital_pe`
- `tb_softmax_unit`
- `tb_digital_die`

`tb_photonic_pe` runs a full 64×64 array and compares each output with the exact
product minus its logged over-range entries.

**`tb_hyatten_top`** runs the chip at two tiles with small memories through
five jobs:
- 2 blocks × 2 tiles × 2 chunks
- 1 × 1 × 1
- plain mode, 1 × 2 × 2
- 2 blocks × 2 tiles × 1 chunk with 2 batches
- plain mode, 1 × 1 × 1 with 2 batches

It checks every probability against a reference softmax built from the same
exponent formula, and every plain result against the exact product. It checks
that the count of repaired entries equals the reference count of over-range
partial products. It also checks that a write attempted while busy is ignored.
It counts each of these mechanisms and fails any that never happened:
- over-range and in-range outputs
- multi-chunk, multi-tile, multi-block and multi-batch jobs
- back-to-back jobs
- blocked writes
- plain mode

**`tb_hyatten_full`** runs the chip at its default parameters through one job:
32 tiles, 2048 keys, 64 rows. It checks all 131072 probabilities. The build
takes about two minutes and the run about ten seconds.
