# FP8 digital compute-in-memory macro with predicted aligned-mantissa width

## Design idea

A floating-point dot product can run on an integer compute-in-memory array if every element of an input group is first shifted to a common exponent, the group's largest. The cost is the width of the aligned mantissas. They must be streamed bit-serially into the array, so every extra bit costs one clock cycle. A fixed, wide alignment is accurate but slow. A fixed, narrow one is fast but throws away the small elements.

This macro picks the width per group from the group's own exponents. Let shift_i = Emax − E_i be the exponent offset of element i. The kept width is

    B_g = round( k · Σ shift_i·2^-shift_i / Σ 2^-shift_i  +  B_fix )

This is a weighted mean of the shifts, weighted by how much each element still contributes after shifting, then scaled by a knob k ∈ {1, 1.5, 2, 2.5, 3}, plus a floor B_fix. Groups whose elements have similar exponents get few bits. Groups with a wide spread get more. Each element then streams B_g + 1 bits: a sign bit plus B_g magnitude bits.

Weights are aligned offline. They are stored as 2, 4, 6 or 8-bit integers, split into 2-bit slices, together with one power-of-two scale per output.

Each group's result is

    out_w = 2^(Emax − bias + 2 − L + wexp_w) · Σ_i a_i · W_{i,w},   L = B_g + 1

Here a_i is the L-bit two's-complement aligned input, W the integer weight, and wexp_w the weight scale. The output is FP32.

## Block overview

| Block | File | Role |
|---|---|---|
| package | `rtl/dcim_pkg.sv` | sizes, configuration struct, FP8 field decoding |
| top | `rtl/dcim_top.sv` | wiring, host interface, top controller |
| input buffer | `rtl/input_buffer.sv` | 16 groups × 64 FP8 codes; parallel exponent read, serial mantissa read |
| max exponent | `rtl/max_exp_offset.sv` | comparator tree for Emax and 64 offsets, 1 cycle |
| MPU | `rtl/mpu.sv`, `rtl/recip_lut.sv` | 3-stage predictor of B_g |
| alignment | `rtl/alignment_unit.sv`, `rtl/fiau.sv` | config register and 64 FIFO alignment units |
| MAC array | `rtl/int_mac_array.sv`, `rtl/cim_column.sv` | 64×96 SRAM, AND gates, adder trees, accumulators |
| fusion | `rtl/fusion_unit.sv` | combines 2b slices into 2/4/6/8b weights |
| INT to FP | `rtl/int2fp.sv` | integer plus scale to FP32 |
| output buffer | `rtl/output_buffer.sv` | 16 entries × 48 FP32 |
| weight buffers | `rtl/weight_buffer.sv` | SRAM image and per-output scales |

Configuration (`cfg_t`, held stable while busy):

- `ebits` is the input exponent width: 2, 4 or 5 gives E2M5, E4M3 or E5M2.
- `dyn` selects the predicted width; otherwise the width is fixed at B_fix.
- `k2` = 2k.
- `bfix`.
- `wmode`: 2, 4, 6 or 8-bit weights.

## Alignment units (FIAU)

This is the most delicate part. Each of the 64 rows has a 16-entry one-bit FIFO.

**Writing.** The mantissa of each element is written into the FIFO one bit per cycle, MSB first. The mantissa is in two's complement and is 9 − ebits bits wide: a sign bit, the hidden bit and the fraction.

**Reading.** A read pointer produces the aligned stream:

- it stays on the mantissa's MSB (the sign bit) for `offset + 1` cycles, so the sign is repeated `offset` extra times, which is an arithmetic right shift by `offset`;
- then it advances one bit per cycle;
- past the stored LSB it emits zeros;
- after L output bits it jumps to the start of the next mantissa.

The result is floor(m · 2^(L − mw − offset)). This is truncation, not rounding, and it costs no extra logic.

**Lockstep.** All 64 rows read in lockstep: a step happens only when every row has its bit available (`r_ok`). A row is not allowed to leave a mantissa before the whole mantissa has been written into its FIFO. Without this rule, a short L could make the read pointer skip past bits that have not arrived yet.

**Writer.** The writer in the top runs ahead of the reader as far as FIFO space allows. It stalls when any FIFO is full.

**Overlap with the MPU.** The config register takes the group's offsets from the max-exponent stage. In fixed mode the length is known at once. In dynamic mode the MPU needs three cycles, so the units start streaming anyway with a provisional length of B_fix + 1. The final length is never shorter than that, because k and the weighted mean are non-negative. Once B_g arrives, it takes effect in the cycle it arrives. A stall is needed only when B_fix ≤ 1, where the provisional length runs out before B_g is known. Both stall kinds, waiting for data and waiting for the length, are counted by the end-to-end test.

## Mantissa prediction unit (MPU)

The MPU is a 3-stage pipeline. Its registers load only in dynamic mode; this enable stands in for a clock gate.

1. **Shift units.** For each row, in fixed point with 8 fraction bits, it computes x_i = shift_i·2^-shift_i (shift_i shifted right by itself) and w_i = 2^-shift_i.
2. **Adder trees.** Two 64-input adder trees form Σx and Σw.
3. **Divide and scale.** The divide uses an 8-bit reciprocal table:
   - Σw is normalised to its leading one;
   - its next 7 bits index a table of round(2^15/m);
   - the table output is multiplied by Σx and shifted back.

   The quotient is then multiplied by k2, B_fix is added with k2's extra half step taken into account, and the result is rounded half up. It is saturated to 5 bits and then limited to 1..11, the valid input widths.

The testbench models the arithmetic bit-exactly. It also checks the output against the real-valued formula, to within the table's resolution.

## Integer MAC array

The array has 48 columns. Each column is a 64 × 2b SRAM column with 64 one-bit × two-bit AND gates, so its 96 bits make up the 64 × 96 array (12 groups of 4 columns).

**Adder trees.** Per column, two adder trees count the products of the MSB slice bits and of the LSB slice bits, giving 7-bit counts. The column value is lsb + 2·msb, or lsb − 2·msb when the column's signed-number flag is set. A weight's top slice is signed, because weights are two's complement.

**Accumulators.** Each 22-bit accumulator does acc = −col on an element's sign bit and acc = 2·acc + col on every later bit. The inputs are MSB first and in two's complement.

**Slices and fusion.** A weight of n = 1..4 slices occupies columns n·w .. n·w+n−1, with the LSB slice first. The fusion unit has 4 instances of 12 columns each:

- 2/4/8-bit weights: pairs of columns are combined as (hi<<2)+lo, and pairs of pairs as (hi<<4)+lo;
- 6-bit weights: the pairs are reused and the third slice is added with its own shift.

Output lane w holds weight w's dot product. Lanes beyond 48/n are unused.

## INT to FP and output

Each of the 48 converters:

- finds the leading one of the magnitude and normalises it;
- truncates to 23 fraction bits;
- adds the group scale (Emax − bias + 2 − L) and the lane's weight scale.

Results below the normal range flush to zero. Results above it become infinity. The top writes one 48-lane entry per group into the output buffer, which the host reads one lane at a time with a one-cycle latency.

## Top controller and timing

**Weight load.** `load_w` copies the weight image into the SRAM, one row per cycle, 64 cycles in total.

**Run.** `start` processes groups 0 .. n_vec−1:

1. Exponent read and Emax: 1 cycle.
2. Config load: 1 cycle.
3. Stream L bits.
4. The result is written into the output buffer two cycles after the last bit.

With no stalls a group takes about L + 4 cycles. The end-to-end test measures 16 groups in:

- 113 cycles with fixed L = 4;
- 177 cycles with fixed L = 8.

`done` pulses after the last group's result is stored. Two status outputs, `ev_len_stall` and `ev_data_stall`, mark the cycles in which streaming pauses:

- `ev_len_stall`: the bitwidth is still pending;
- `ev_data_stall`: a FIFO has not yet received its next bit.

## Where this design departs from the source architecture

- **No overlap between groups.** Each group's exponent and config cycles are not overlapped with the previous group's streaming, which adds about 3–4 cycles per group. The reference throughput figures correspond to one group per L cycles: 0.192 TFLOPS for 4-bit inputs and weights, and 0.048 TFLOPS for 8-bit ones, at 250 MHz. This design reaches about half and two thirds of those figures. The MPU latency itself is hidden, as described above. Overlapping groups would need a second config register that takes the next group's offsets and bitwidth while the current group streams.
- **No integer mode.** The INT4/INT8 modes, which bypass alignment, MPU and INT-to-FP, are not built.
- **Wider adder-tree outputs.** The adder-tree outputs are 7 bits wide; 64 ones do not fit in 6.
- **Truncating alignment.** Alignment truncates, which is what the pointer-based FIFO does, rather than rounding the shifted mantissa.
- **Own choices.** The following are this design's own choices:
  - the output format (FP32 with truncation, flush to zero, infinity on overflow);
  - the buffer depths (16);
  - the reciprocal table contents;
  - the 8-bit fixed-point fraction in the MPU;
  - the FP8 decoding (IEEE-style bias, subnormals, no NaN/Inf handling);
  - the host interface.
- **SRAM bitcells.** The SRAM bitcells are a register array.
- **Weight preparation.** Offline weight alignment and width selection are left to software. The host writes already-aligned integer weights and their scales.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M` at the end. The reference models are in `tb/dcim_tb_pkg.sv`. For example, with Verilator 5:

    verilator --binary --timing -Wno-fatal --top-module tb_dcim_top \
        rtl/dcim_pkg.sv $(ls rtl/*.sv | grep -v dcim_pkg) \
        tb/dcim_tb_pkg.sv tb/tb_dcim_top.sv
    ./obj_dir/Vtb_dcim_top

To run a block test, swap in its testbench and top module name, for example `tb_mpu`. `rtl/dcim_pkg.sv` and `tb/dcim_tb_pkg.sv` must come before the files that import them.

**End-to-end test.** `tb_dcim_top` runs at the default sizes and loads random weights, scales and FP8 inputs. It runs six configurations:

- E4M3, dynamic, k=1, B_fix=6, 6-bit weights;
- E5M2, dynamic, k=2, B_fix=4;
- fixed 8-bit weights;
- fixed 4-bit weights;
- E2M5 with B_fix=1, dynamic;
- E2M5 with B_fix=1, fixed.

For each configuration it checks every output lane of 16 groups against a real-valued model of the aligned arithmetic. It also checks the MPU width against a bit-exact model.

It counts and requires these events:

- dynamic groups;
- fixed groups;
- cycles with the MPU gated;
- stalls waiting for B_g;
- FIFO-full writer stalls;
- reader waits for data.
