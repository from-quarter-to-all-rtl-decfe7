# SPEQ: one set of FP16 weights for both the draft and the target model

Speculative decoding speeds up token generation: a cheap draft model guesses several tokens, and the expensive target model checks them all in one pass. It normally needs a second set of weights for the draft model. This design avoids that. The draft model is a 4-bit view of the FP16 target weights. It is made only of each weight's sign and a remapped 3-bit exponent, so the draft reads a quarter of the weight bits and the target reads all of them. The same bits are fetched and decoded by one processing-element (PE) array that switches between two modes:

- **quantize mode** (drafting): three draft weights per PE per cycle. Each draft weight is a signed power of two.
- **full mode** (verification): one FP16 × FP16 multiply-accumulate per PE per cycle.

This repository holds synthesizable SystemVerilog for the accelerator core and a self-checking testbench for every block. The core consists of the weight format decoders, the reconfigurable PE and its array, on-chip buffers, the group scaling path, the control unit and the draft/verify sequencer.

## 1. The bit-sharing weight format (BSFP)

An FP16 weight is `s | e4 e3 e2 e1 e0 | m9..m0`. In trained LLMs almost every weight has `e4 = 0`, so the exponent effectively lives in `e3..e0`. BSFP keeps the FP16 bit positions but gives the bits new meanings:

| bits       | name  | meaning |
|------------|-------|---------|
| 15         | s     | sign (shared by both models) |
| 14         | flag  | 1 = this exponent was remapped (the position of the old `e4`) |
| 13..11     | code  | 3-bit exponent code (shared by both models) |
| 10         | e0    | lowest exponent bit |
| 9..0       | man   | FP16 mantissa |

The draft weight `Wq = {s, code}` is 4 bits. The remainder `Wr = {flag, e0, man}` is 12 bits, and only the full model reads it.

For a weight with exponent field `e` (which must be below 16), the encoder works as follows:

- Most exponents use `code = e[3:1]` with `flag = 0`. The draft sees the even exponent `{code,0}`.
- Five exponents move into the codes that would otherwise be wasted:
  - 0 → code 001, e0 = 0
  - 1 → code 001, e0 = 1
  - 4 → code 011, e0 = 0
  - 5 → code 011, e0 = 1
  - 9 → code 000
  - 11 → code 010

  Each of these sets `flag = 1`.

The effect is that the draft model sees the exponents near the weight distribution's peak (8 to 11) exactly, and coarser steps elsewhere. The draft value of a weight is `(-1)^s · 2^(q-15)` with no mantissa:

| FP16 exponent | 0–3 | 4–7 | 8 | 9 | 10 | 11 | 12, 13 | 14, 15 |
|---------------|-----|-----|---|---|----|----|--------|--------|
| draft exponent `q` | 2 | 6 | 8 | 9 | 10 | 11 | 12 | 14 |

Two small combinational decoders undo this:

- `bsfp_qdec` (draft exponent from the code):
  - If `code[2]` and `code[0]` are both 0 (a NOR of the two), the result is `{1,0,code[1],1}`, i.e. 9 or 11.
  - Otherwise it is `{code,0}`.
- `bsfp_fdec` (the original exponent bits 3..0):
  - If `flag = 0` the code passes through.
  - If `flag = 1` a 4-entry table on `code[1:0]` gives the original upper bits: 00→100, 01→000, 10→101, 11→010.
  - `e0` is appended in both cases.

The encoder is offline software. It also finds the per-group scales described in §5. The testbench package `tb/tb_util_pkg.sv` contains a reference encoder (`bsfp_encode`), which the testbenches use to produce weights.

### Weight-buffer lanes

Each PE reads one 16-bit lane of the weight-buffer word, and `bsfp_decode_lane` turns it into a 15-bit PE word:

- **full mode:** the lane is a BSFP weight. The decoded word is `{s, exp[3:0], man}`; `e4` is always 0 after decoding.
- **quantize mode:** the lane holds three draft weights `{Wq2, Wq1, Wq0}` in bits 11..0, and bits 15..12 are unused. The decoded word is three `{s, q[3:0]}` fields.

Either way the PE input is 16 activation bits + 15 weight bits = 31 bits, so the PE's input width is the same in both modes. The lane packing is this design's choice; a memory system that keeps Wq and Wr apart in DRAM would assemble these lanes when it fills the buffer.

## 2. The reconfigurable PE (`speq_pe`)

The PE has four parts: sign XORs, a 5b + 4b exponent adder, two 5b × 10b Wallace-tree multipliers (`wallace_5x10`), and three FP32 accumulators (`fp32_acc`).

**Full mode.** The two Wallace trees multiply the upper and lower halves of the weight mantissa by the 10-bit activation mantissa. Their outputs are combined into the 20-bit fraction product. The PE then adds the hidden-bit terms (`1·1`, `1·mw`, `ma·1`), giving a 22-bit significand. The exponent adder forms `ea + ew`. One product per cycle goes into accumulator #0.

**Quantize mode.** A product with a power of two is only an exponent addition:

- The exponent adder handles draft weight 0.
- The two Wallace trees are switched to *add mode*: their partial products are masked and their final adders compute `ea + q1` and `ea + q2`.

The significand is the activation's own `{hidden, man}`. Three products per cycle go into accumulators #0, #1 and #2. Accumulators #1 and #2 are not clocked in full mode.

**Product format.** `prod_t = {sign, exp[5:0], sig[21:0]}`, with value `sig · 2^-20 · 2^(exp-30)`. This one format serves both modes.

**Subnormal activations and weights.** An exponent field of 0 is read as exponent 1 with hidden bit 0. Zeros therefore give a zero significand and add nothing.

**Accumulation** (`fp32_acc`, adder core `fp_add_core`):

- FP32 with round to nearest even.
- Subnormal results are flushed to zero; overflow gives infinity. NaN is not handled.
- `first` starts a new sum and `last` copies the new sum into a hold register. The array can then be drained while the next group is being accumulated.

## 3. Array, dataflow and timing

`pe_array` holds `N_TILES = 8` tiles of `N_PE = 128` PEs (1024 PEs) and one decode lane per PE. The dataflow is output-stationary:

- In every cycle each tile takes one FP16 activation, and all 128 PEs of the tile share it.
- Every PE takes its own weight lane.
- Over 128 cycles (one quantization group of 128 input rows) each PE accumulates the dot product for its columns:
  - full mode: column `t·128 + i` (1024 columns per pass);
  - quantize mode: columns `3(t·128 + i) + k` for k = 0, 1, 2 (3072 columns per pass).

Each tile has its own activation lane, so the eight tiles can work on different tokens. The verification pass checks several draft tokens, so this lets it run them side by side. Tiles that should see the same token get the same value in every lane.

The control unit (`speq_ctrl`) runs one *job*, a matrix-vector product over `n_groups` groups of 128 rows. It runs three overlapping streams, each moving one step per cycle:

1. **Issue.** Read weight word `w_base + r` and activation word `a_base + r` for row r.
2. **Compute.** One cycle later these reach the array with `pe_en`. `pe_first` is set on row 0 of a group and `pe_last` on row 127.
3. **Drain.** After a group's `pe_last`, `drain_idx` steps through PEs 0..127 of every tile. For each one the unit reads output word `o_base + i` and scale word `s_base + g·128 + i`. One cycle later it writes the scaled group sum back to output word `o_base + i`.

The drain of group g overlaps the compute of group g+1. A job therefore takes exactly

    N_GROUPS · 128 + 128 + 3 cycles        (start pulse to done)

and the testbenches check this count.

The first group of a job overwrites its output words. If `job_accum` is set, the first group adds to them instead. This lets a layer whose input dimension exceeds one weight-buffer load be split over several jobs.

Output word `o_base + i` holds 24 FP32 lanes. Lane `3t + k` is accumulator k of PE i in tile t.

## 4. Buffers

| buffer | word | depth | size |
|--------|------|-------|------|
| weight (W) | 1024 lanes × 16 b | 256 | 512 KB |
| activation (A) | 8 tiles × FP16 | 32768 | 512 KB |
| output | 24 × FP32 | 5461 | ≈512 KB |
| scale store | 24 × FP32 | 1024 | 96 KB |

All of them are `speq_sram`: one write port and one synchronous read port. A read returns the old data when the same address is written in the same cycle. In a real flow SRAM macros would replace this array model.

The host reaches the buffers through the ports of `speq_top`:

- it fills the weight, activation and scale buffers through their write ports;
- it reads results through the output-buffer read port. While a job drains, the job has priority on that port.

The DRAM behind the host and the special function unit (activation functions, softmax) are outside this core.

## 5. Group scaling (`group_scaler`)

The draft weights are scaled per quantization group of 128 input rows. Every column of every group has an FP32 scale chosen offline to fit the powers of two to the real weights. When a group drains, the scaler computes, for every lane:

- quantize mode: `out = base + s · g`;
- full mode: `out = base + g`, with no scale.

Here `g` is the group sum from the PE, `s` is the scale and `base` is the old output word. `base` is taken as 0 for the first group of a job unless `job_accum` is set. In full mode, lanes `3t+1` and `3t+2` carry no data and are written as zero.

The offline outlier handling (scaling a tensor whose largest value falls outside the remapped range) folds into these group scales, so it needs no hardware.

## 6. Draft / verify sequencing (`spec_ctrl`)

A decoding round goes as follows:

1. Draft one token at a time in quantize mode. For each token the host runs the draft forward pass as jobs and reports the largest draft probability on `tok_valid` / `tok_prob`.
2. Drafting stops at `L_MAX = 16` tokens. It also stops early when a probability falls below `GAMMA = 0.6`, held as 39322/65536. A token that triggers the early exit is not counted.
3. Then `verify_req` asks for one verification pass in full mode.
4. The host reports the number of accepted drafts on `verify_done` / `n_accept`.
5. The round emits `out_len = min(n_accept, n_drafted) + 1` tokens: the accepted drafts plus the target model's own next token.

The `mode` output of `spec_ctrl` drives the PE array's mode.

## 7. Where this RTL departs from, or goes beyond, the paper's description

- **Significand width.** The product path carries 22 significand bits, which keeps the full FP16 × FP16 product exact. The published PE diagram labels a 20-bit product and 27-bit / 17-bit accumulator inputs. The 20-bit value (the fraction product) exists inside this design too.
- **Decoder conflict.** The published description says the full decoder joins its table output with the remap flag, but the published diagram joins `e0`. Joining the flag would make every remapped exponent odd, which contradicts the remap table (exponents 0 and 4 are remapped). The RTL follows the diagram.
- **This design's own choices:**
  - the lane packing of §1;
  - the per-tile activation lanes;
  - the job interface, including `job_accum`;
  - the drain schedule and its cycle count;
  - the scale store and FP32 scale format;
  - FP32 rounding, flush-to-zero and overflow rules;
  - the fixed-point format of γ;
  - the spec_ctrl handshake;
  - asynchronous active-low reset everywhere.
- **Not built:**
  - DRAM and its controller (external; replaced by buffer ports).
  - The special function unit. Only its purpose is known, not its functions or formats.
  - The vector unit that appears in the area breakdown, whose function is not described.
  - The offline BSFP encoder and scale search. These are software; the testbench package has a reference encoder.
  - Token sampling and acceptance, whose results enter through `spec_ctrl`'s ports.
- **No PE-to-PE paths.** The array does not forward data between neighbouring PEs, because the data on those paths is not described.
- **Timing.** The 500 MHz target has not been checked; no timing closure was done.

## 8. Files

| file | contents |
|------|----------|
| `rtl/speq_pkg.sv` | modes, BSFP field structs, product and FP32 types |
| `rtl/bsfp_qdec.sv`, `rtl/bsfp_fdec.sv`, `rtl/bsfp_decode_lane.sv` | the decoders of §1 |
| `rtl/wallace_5x10.sv` | 5b × 10b Wallace multiplier with add mode |
| `rtl/fp_add_core.sv`, `rtl/fp32_acc.sv`, `rtl/fp32_mul.sv` | FP32 arithmetic |
| `rtl/speq_pe.sv`, `rtl/pe_tile.sv`, `rtl/pe_array.sv` | PE, tile, array |
| `rtl/speq_sram.sv` | buffer model |
| `rtl/group_scaler.sv` | §5 |
| `rtl/speq_ctrl.sv`, `rtl/spec_ctrl.sv` | control unit, draft/verify sequencer |
| `rtl/speq_top.sv` | the core |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_util_pkg.sv` | reference models: FP16/FP32 ↔ real, BSFP encoder, draft values |
| `tb/tb_top_body.svh` | end-to-end test body shared by the two top-level testbenches |

## 9. Simulating

Every testbench checks its outputs against reference values computed separately, in `real` arithmetic or bit-exact models. Each prints `TB_RESULT checks=N failures=M` and stops itself; a watchdog ends any run that hangs.

For example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/speq_pkg.sv tb/tb_util_pkg.sv rtl/*.sv tb/tb_speq_pe.sv \
        --top-module tb_speq_pe
    ./obj_dir/Vtb_speq_pe

Replace `tb_speq_pe` with any other testbench name.

**End-to-end tests.** `tb_speq_top` runs the core with 2 tiles of 8 PEs and 8-row groups. `tb_speq_top_full` runs it at the full size (8 × 128 PEs, 512 KB buffers, L = 16). Both:

- fill the buffers with BSFP weights produced by the reference encoder;
- run quantize-mode and full-mode jobs and check every output word against a reference dot product;
- check the job cycle count;
- play decoding rounds through `spec_ctrl`;
- count how often each mechanism occurred and fail if one never did. The mechanisms are quantize and full jobs, drain/compute overlap, accumulation across groups and jobs, remapped weights, early exit and maximum-length rounds.

There is one difference between the two. The full-size weight buffer holds only 256 rows, and it must store both the draft and the full copy of the test matrix, so the full-size test uses one group per job. Drain overlap is therefore exercised only by the reduced test. The full-size test makes about 64,000 checks and simulates in seconds. Building it is slower: with verilator this takes a few minutes, because the array has 1024 PEs. Pass `-j` to compile in parallel.

**Changing the size.** The sizes are parameters of `speq_top`: `N_TILES`, `N_PE`, the four buffer depths and `L_MAX`. Address and word widths are derived from them. `N_PE` is also the quantization group size, because a group's rows must fill one pass of the array. The output word width is `3 · N_TILES` FP32 lanes, and the scale store's width follows it.
