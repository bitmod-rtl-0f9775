# BitMoD accelerator: bit-serial matrix multiply with mixed low-precision weight types

Transformer LLM inference on edge devices is limited by the bytes of weights it must stream, not by
arithmetic. This design multiplies FP16 activations by weights that are quantized per group of 128
to one of four formats: INT8, INT6, FP4 or FP3. It spends time in proportion to the weight's
precision.

The key idea is that every weight, whatever its format, becomes a short series of *bit-serial
terms*. The PE processes one term per cycle. INT8 weights take 4 cycles per group of four
multiply-accumulates, INT6 takes 3, and FP4 and FP3 take 2.

The two FP formats drop the redundant negative zero. In its place they use a per-group
*special value* that gives the format extra resolution or extra range:
- FP4: ±5 or ±8;
- FP3: ±3 or ±6.

The per-group scaling factor is an 8-bit integer. It is applied by a bit-serial multiplier that
finishes in the shadow of the next group.

The RTL is SystemVerilog 2017 and synthesizable. The top level (`bitmod_top`) contains:
- a 512 KB banked input buffer;
- a 512 KB banked weight buffer with per-group metadata;
- a sequencer;
- the bit-serial term generator with its special-value register file;
- skew registers;
- a 4 × 4 array of tiles, each 8 × 8 PEs.

That is 2048 PEs, each doing a 4-way dot product.

## 1. One number format for all weight types: the bit-serial term

A term is `(-1)^sign · 2^exp · man · 2^bsig`, with these fields:
- `sign`: 1 bit.
- `exp`: 2 bits; only 0 or 1 is produced.
- `man`: 1 bit; 0 means the term contributes nothing.
- `bsig`: 3 bits, the bit significance, shared by the four lanes of a PE in a cycle.

A weight's value is the sum of its terms.

**INT8 / INT6 (`booth_term`).** Radix-4 Booth recoding of the two's-complement weight:
- The triplet `{w[2k+1], w[2k], w[2k-1]}` gives digit k, with bsig 2k.
- Triplets 000 and 111 give 0, 001 and 010 give +1, 011 gives +2 (`exp` = 1), 100 gives −2, and
  101 and 110 give −1.
- INT8 produces digits k = 3, 2, 1, 0 (bsig 6, 4, 2, 0).
- INT6 reads bits 5:0 only and produces k = 2, 1, 0.
- Terms are issued most significant first.

**FP4 / FP3 (`fp_term`).**
- An FP4 code `{s, E1, E0, M}` (E2M1, values 0, 0.5, 1, 1.5, 2, 3, 4, 6) becomes a sign-magnitude
  fixed-point number `{I3 I2 I1 I0 . F0}`.
- The code `1000` (−0) is replaced by the group's special value. That value comes from a 4-entry
  register file (`sv_regfile`) through the group's 2-bit select.
- Every representable magnitude, special values included, has at most two 1-bits. Two
  leading-one detectors therefore give at most two terms:
  - the first looks at `{I3..I0}` (bsig 1);
  - the second looks at `{I2..F0}` (bsig 0), after the bit the first one took has been cleared.
- FP3 `{s, E1, E0}` is FP4 with M = 0, so it uses the same decoder.
- All FP terms are in units of ½. An FP group result is therefore exactly twice the true value.
  This factor is folded into the per-channel output scale, which is applied downstream anyway
  (see section 5).
- The reset contents of the special-value registers are +5, −5, +8, −8. They can be reprogrammed
  at any time through `sv_we/sv_waddr/sv_wdata`. The value is sign plus a 5-bit magnitude in half
  units, so ±3 is written as magnitude 6.

**Term generator (`bs_term_gen`).**
- Each cycle it decodes term `s` of the four weights of every PE column (32 columns) with both
  decoders and selects one by data type.
- It registers the terms together with:
  - the group's scaling factor;
  - a control bundle `tctl_t {valid, grp_last, pass_first, bsig}`, which travels with the terms
    through the array.
- `grp_last` is raised only on the last term of the last word of a group.

## 2. The PE (`bitmod_pe`, `pe_dequant`)

Each cycle a PE takes four FP16 activations `a` and four terms `w` that share one `bsig`.

**Step 1: exponent alignment.**
- For each lane, `e_i = a_e + w_exp` (6 bits) and the product sign is `a_s XOR w_s`.
- A MAX over the non-zero lanes and the accumulator gives `e_max`.

**Step 2: bit-serial multiply.**
- The 11-bit activation mantissa (hidden bit included) is ANDed with `w_man`.
- It is then shifted right by `e_max − e_i` into 14 bits, which include 3 guard bits for rounding.
- It is negated into 15 bits and summed by a 4-input adder tree into 17 bits.

**Step 3: accumulate.**
- The dot product is shifted left by `bsig` and added to the aligned accumulator mantissa.
- The sum is renormalized into the 15-bit `m_ACC` with round-to-nearest-even, and the 6-bit
  `e_ACC` is updated.
- The accumulator's value is `m_ACC · 2^(e_ACC − 28)`: 28 = FP16 bias 15 + 10 fraction bits +
  3 guard bits.

**Step 4: dequantize (`pe_dequant`).**
- At the last term of a group the accumulator is handed to the dequantizer and cleared.
- The dequantizer multiplies `m_ACC` by the 8-bit scaling factor one bit per cycle (MSB first,
  shift-and-add) over 8 cycles.
- It then normalizes the product into a 21-bit `m_GRP`. The 3-bit shift it needed is added to the
  exponent to give `e_GRP`.
- The next group already accumulates during these cycles. The shortest group is 128/4 × 2 = 64
  cycles (FP3), so the dequantizer never stalls the PE. An assertion (`a_no_overrun`) checks this.
- `res_valid` rises SF_W + 1 = 9 cycles after the group's last term.

**How this differs from the straightforward reading of the step-3 datapath.** Taken literally,
the accumulator exponent enters the MAX of step 1 unchanged. The products are then aligned to
`e_ACC` *before* the shift by `bsig`. For bsig = 6 the term's product is scaled by 64 after it has
already lost up to 6 low bits to the alignment shifter. In simulation this gave about 1 % error per
term.

This design instead makes the accumulator enter the MAX with its exponent lowered by `bsig`. When
the accumulator's exponent ends up larger, it is shifted *left* (by at most `bsig`) instead of
right. Two more additions:
- a left normalization (bounded so the exponent stays ≥ 0), to recover precision after
  cancellation;
- an accumulation adder 24 bits wide; the datapath figure prints no width for it.

With these changes the PE's group result agrees with an exact reference to within about 2⁻⁹ of
the sum of the magnitudes of the products.

Subnormal activations use exponent 1 and hidden bit 0. Lanes whose activation or term is zero do
not take part in the MAX.

## 3. Columns, tiles and the array

**PE column (`pe_column`, 8 PEs).**
- All PEs of a column receive the same terms; each receives its own row of activations. The
  dataflow is output stationary: PE r holds output row r's partial sum for the current group.
- The PEs run in lockstep (asserted), so all finish dequantizing in the same cycle.
- An 8:1 mux then drains them, one per cycle, into **one** shared floating-point accumulator
  (`col_acc`). That accumulator adds the group result to word r of the column's output buffer.
  - The output buffer has 8 words; each is a 24-bit signed mantissa and a 7-bit exponent, value
    `m · 2^(e − 28)`.
  - If the group was the first of a pass, the word is overwritten instead of added to.
- Draining takes 8 cycles, much less than a 64-cycle group. It overlaps the next group's
  computation and never collides with the next drain, which is also asserted.

**Tile (`pe_tile`, 8 × 8).**
- Eight columns. Each row's activations are broadcast across the tile; each column's terms are
  broadcast down it.
- The tile registers its activations (passed to the tile on the right) and its terms with their
  control (passed to the tile below). Each hop takes one cycle.

**Array (`pe_array`, 4 × 4 tiles).**
- Activations enter each tile row at the left; terms enter each tile column at the top.
- Tile (i, j) sees tile row i's activations j cycles late and tile column j's terms i cycles late.
- The top level therefore pre-skews the inputs: tile row i's activations by i cycles and tile
  column j's terms by j cycles. After this, every tile pairs the same activation word with the
  same term, at cycle `2 + i + j` after the buffer read.

The array computes a 32 × 32 block of outputs (32 token rows × 32 output channels) at once:
- 2048 PEs × 4 MACs every T cycles;
- at a 1 GHz clock, that is 2.0 TMAC/s for INT8, 2.7 for INT6 and 4.1 for FP4/FP3.

## 4. A pass through the top level (`bitmod_top`, `bitmod_seq`)

**Buffer layout.** The layout is this design's choice; the off-chip DRAM side is represented by
the write ports.

| Buffer | Banks | Word | Depth | Meaning |
|---|---|---|---|---|
| input (`input_buffer`) | 32, one per array row | 4 FP16 (64 bit) | 2048 | bank r, word `ibase + k/4`, lane `k%4` = X[r][k] |
| weight (`weight_buffer`) | 32, one per array column | 4 × 8-bit slots | 4096 | bank c, word `wbase + k/4`, lane `k%4` = W[k][c] |
| metadata (in `weight_buffer`) | 32 | {sel[1:0], sf[7:0]} | 128 | bank c, entry `mbase + g` = group g of channel c |

Each weight takes one 8-bit slot whatever its format, with the value in the low bits:
- INT8: bits 7:0;
- INT6: bits 5:0;
- FP4: bits 3:0;
- FP3: bits 2:0.

Both data buffers are 512 KB.

**Starting a pass.** Set `cfg_dtype`, `cfg_ngroups` (1–255), the three base addresses and
`cfg_accum`, then pulse `start` while `busy` is low. The sequencer then does the following:
1. For every group and every word of the group (GROUP/4 = 32 words), it reads one word from every
   bank on the first term of the word.
2. It steps the term index through T = 4/3/2/2 cycles (INT8/INT6/FP4/FP3).
3. It marks the last word of each group (`grp_last`) and the first group of the pass
   (`pass_first`).
4. It waits a fixed `LAT = TR + TC + SF_W + ROWS + 6` (30) cycles for the last drain.
5. It pulses `done`.

**Latency.** From the clock edge that samples `start` to `done`, a pass takes exactly
`n_groups · GROUP/4 · T + LAT + 1` cycles. Examples at full size with two groups:
- INT8: 287 cycles;
- INT6: 223;
- FP4/FP3: 159.

**Accumulate mode.** With `cfg_accum = 1`, no group carries `pass_first`, so the pass *adds* to
the outputs already in the column buffers. A reduction longer than the 8192 FP16 values an input
bank holds can then be split across passes, reloading the input buffer between them.

**Reading results.** Results are read combinationally through `rd_tr/rd_tc/rd_col/rd_row`:
output row `r = rd_tr·8 + rd_row`, channel `c = rd_tc·8 + rd_col`.

**Status outputs** (for monitoring and tests):
- `stat_special`: a special value was used;
- `stat_norm`: a PE renormalized;
- `stat_dq_busy`: some dequantizer is running;
- `stat_drain`: some column is draining.

## 5. What one output word means

After a pass, output (r, c) is

    Y[r][c] = Σ_g sf[c][g] · Σ_{k in g} X[r][k] · q[c][k]

where `q` is the quantized weight value:
- the integer for INT8/INT6;
- twice the FP value for FP4/FP3, with −0 replaced by 2 × the group's special value.

Turning this into the layer output is left to the element-wise stage after the array: multiply by
the per-channel second-level scale, which quantizes the per-group scales, and by ½ for FP weights.
Per-channel rescaling only has to happen once per output, so keeping it out of the array costs
nothing there.

The scaling factor is treated as an unsigned magnitude 0..127 (an assertion flags a set top bit).
Scales of symmetric quantization are positive.

## 6. Where this design departs from the paper or fills gaps

**Departures from the published PE datapath.**
- The accumulator's exponent enters the MAX lowered by `bsig`, and the accumulator can be
  left-shifted (section 2).
- Left normalization after cancellation is added.
- The accumulation adder is 24 bits wide.
- Together these keep the error at rounding level, where the literal datapath loses about 1 % per
  high-significance term.

**Choices in the term decoders.**
- The second FP leading-one detector works on `{I2..F0}` with the first detector's bit cleared.
- FP values are in half units.
- Weights occupy 8-bit slots. Packed 6-, 4- and 3-bit storage is not modelled, so the weight buffer
  holds 512 K weights of any type.

**Data types.**
- Scaling factors are non-negative (0..127).
- The per-channel scale and the FP factor ½ are applied outside the array.

**Structure not described in the paper.** The following are this design's own:
- the sequencer;
- the accumulate mode;
- the skew registers and the one-register-per-hop systolic timing;
- the buffer banking and word layout;
- the metadata store beside the weight buffer;
- the output-buffer format and read port;
- the drain order;
- the special-value reset contents.

**Not built.**
- The off-chip DDR4 memory and its controller. The buffers' load ports stand in for it.
- Nothing overlaps loading with computing. The buffers have a single port set, and a pass must not
  be started while the banks it reads are being written.
- The write-back of finished outputs to memory; outputs are read through the read port.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each compares against values computed in the
testbench with real arithmetic, counts checks and failures, and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_booth_term` | all 256 INT8 and 64 INT6 values: terms sum to the weight; the Booth digit table |
| `tb_fp_term` | all 16 FP4 codes against the E2M1 table, with every special value; special flag |
| `tb_sv_regfile` | reset contents, writes, independent read ports |
| `tb_bs_term_gen` | all four types: term values, term count per type, `grp_last` only on the last term, scale and special flag passed through |
| `tb_pe_dequant` | value of m·sf, 9-cycle done latency, 8 busy cycles |
| `tb_bitmod_pe` | groups of INT8 and FP terms against an exact dot product (tolerance 2⁻⁹ of the magnitude sum); result latency SF_W + 1; renormalization and dequantization overlap seen |
| `tb_pe_column` | two passes (3 and 2 groups); overwrite at the start of a pass; drain length and drain/compute overlap |
| `tb_pe_tile` | one-cycle hop of activations, control and terms; every output of a 2 × 3 tile |
| `tb_pe_array` | the skewed 2 × 2-tile array: all outputs and the exact cycle the last drain ends |
| `tb_input_buffer`, `tb_weight_buffer` | random writes and reads of all banks, read hold, metadata |
| `tb_bitmod_top` | the whole accelerator at reduced size (2 × 2 tiles of 4 × 2 PEs, group 32) |
| `tb_bitmod_full` | the same test at the full default size (4 × 4 tiles of 8 × 8, group 128, 512 KB buffers) |
| `tb_bitmod_llm_slice` | a 7B-class FFN down-projection block, K = 11008 (86 groups), full-depth buffers, 2 × 2 tiles: two passes (64 groups, then 22 in accumulate mode after reloading the inputs), in INT6 and in FP3 with ±3/±6 |

The two end-to-end testbenches share `tb/tb_top_body.svh`. Each runs five passes of two groups:
1. INT8;
2. INT6;
3. FP4 with the reset special values;
4. FP3 after reprogramming the special values to ±3/±6;
5. INT6 again in accumulate mode, on top of the FP3 results.

The data are random, with injected −0 codes. For every pass the testbench checks:
- all 1024 outputs at full size (64 at reduced size), against the formula of section 5, to 2⁻⁸ of
  the magnitude sum;
- the exact pass latency;
- that no column is busy at `done`.

The testbench also counts each mechanism and fails if any never happened:
- each data type;
- special-value use;
- register reprogramming;
- renormalization;
- dequantization overlapping computation;
- drains overlapping computation;
- multi-group passes;
- overwrite at a new pass;
- accumulate mode.

The full-size run builds in about 3 minutes and simulates in a few seconds.

Each block was also checked against a deliberately broken copy (for example, the activation sign
ignored in the PE, or the weight skew removed at the top level), and each testbench reports
failures against its broken copy.

## 8. Simulating

Everything is plain Verilator 5 (`--binary --timing`). Packages are listed first; other modules
are found by name in `rtl/` and `tb/`. For example, the end-to-end test:

    verilator --binary --timing --assert --timescale 1ns/1ps -Itb -y rtl -y tb +libext+.sv \
        rtl/bitmod_pkg.sv tb/tb_pkg.sv tb/tb_bitmod_top.sv --top-module tb_bitmod_top
    ./obj_dir/Vtb_bitmod_top

Each testbench ends by printing `TB_RESULT checks=N failures=M`. For a block testbench, replace
the last file and the top-module name. Parameters of the blocks are typed and have the full-size
defaults. The testbenches that shrink the design do so with `#(...)` on the instance.

## 9. Sizes and workloads

The target workloads are decoder LLMs from 1.3 B to 13 B parameters (OPT, Phi-2, Yi, Llama-2,
Llama-3) at batch size 1 with 256-token inputs. They use INT6 weights for lossless accuracy, and
FP4 or FP3 with special values for the lossy configuration.

The whole weight set of such a model, at least about 1 GB, is far beyond the 512 KB weight buffer,
so weights stream from external memory tile by tile, as in the original architecture. Per pass the
design needs:
- 32 tokens × K activations: 8192 per bank fits K ≤ 8192;
- 32 channels × K weights: 16384 per bank;
- K/128 metadata entries: 128 per bank.

The FFN layers of the larger models have K = 10240 to 14336. They run as two passes, the second in
accumulate mode. `tb_bitmod_llm_slice` runs exactly this for K = 11008.

## 10. Files

`rtl/`:
- `bitmod_pkg` (types and constants);
- `booth_term`, `fp_term`, `sv_regfile`, `bs_term_gen`;
- `bitmod_pe`, `pe_dequant`, `col_acc`, `pe_column`, `pe_tile`, `pe_array`;
- `input_buffer`, `weight_buffer`;
- `bitmod_seq`, `bitmod_top`.

`tb/`:
- one testbench per block;
- `tb_pkg` (reference arithmetic helpers);
- `tb_top_body.svh` (shared end-to-end test).

Each file begins with a description of its function, interface and timing, and of what is taken
from the published design versus chosen here.
