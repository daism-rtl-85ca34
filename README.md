# DAISM — an accelerator that multiplies by reading SRAM

Most of the work in a neural network is matrix multiplication, and most of
the energy of a matrix multiplication goes into moving operands from
memory to the multipliers and adding partial products. DAISM moves the
multiplication into a conventional SRAM array. It stores one operand in a
special form and reads it with **several wordlines active at once**. Such
a read returns the bitwise OR of the selected rows. When the rows hold the
shifted copies of a multiplicand, that OR approximates the sum of the
partial products: a multiplication with no adder tree and no carry chain,
done bit-parallel during one read.

This repository holds synthesizable SystemVerilog for the accelerator in
its main configuration:

* 16 banks, each an 8 kB (256 × 256 bit) multi-wordline SRAM;
* the **PC3_tr** multiplier variant (described below);
* bfloat16 operands, with the sign and exponent handled in digital logic
  next to each SRAM column.

With the defaults the chip performs 16 banks × 16 columns = 256
approximate multiply-accumulates per cycle.

## 1. The OR multiplier

Take multiplicand `a = 1011` and multiplier `b = 0101`. Store
`a << 0`, `a << 1`, `a << 2` and `a << 3` in four rows. Turn on the rows
whose multiplier bit is 1, here rows 0 and 2. The bitlines then give

```
  0001011   (a << 0)
| 0101100   (a << 2)
= 0101111   = 47       exact product 0110111 = 55
```

The result is exact when no two selected partial products have a 1 in the
same column. It loses most when neighbouring, high-order partial products
overlap. Call the partial products A, B, C, … from the most significant
multiplier bit down (A = multiplicand << 7 for 8-bit operands, H = the
multiplicand unshifted). Three refinements follow from this:

* **Pre-computed sums (PC2, PC3).** Store the *exact* sums of the top two
  (PC2) or three (PC3) partial products in extra rows. The decoder
  selects the one row that matches the top multiplier bits, so no error
  can come from those bits. Only the lower partial products are still
  OR-ed.
* **Hidden one.** A floating-point mantissa always has its MSB set, so A
  is always selected. The combinations without A never occur and need no
  row. For PC3 that leaves 4 rows (A, A+C, A+B, A+B+C) instead of 7.
* **Truncation (`_tr`).** Nothing carries, so the result can be cut off
  at any bit. The `_tr` variants keep only the top 8 bits of the 16-bit
  mantissa product, which is the bfloat16 mantissa width including the
  hidden one. The unshifted partial product H lies entirely below those 8
  bits, so it gets no row.

For bfloat16 (an 8-bit mantissa `m` with its hidden one) PC3_tr uses
**8 rows per kernel element**:

| row | content (16 bits)     | selected when, for input mantissa `x` |
|-----|-----------------------|---------------------------------------|
| 0   | `m·4 << 5` = A        | `x[6:5] == 00`                        |
| 1   | `m·5 << 5` = A+C      | `x[6:5] == 01`                        |
| 2   | `m·6 << 5` = A+B      | `x[6:5] == 10`                        |
| 3   | `m·7 << 5` = A+B+C    | `x[6:5] == 11`                        |
| 4   | `m << 4` = D          | `x[4]`                                |
| 5   | `m << 3` = E          | `x[3]`                                |
| 6   | `m << 2` = F          | `x[2]`                                |
| 7   | `m << 1` = G          | `x[1]`                                |

The product is bits 15:8 of the OR of the selected rows. `x[0]` is
ignored. The products are therefore approximate by design: exact when
`x[4:0]` is zero, and never larger than the exact product. The order of
the rows is this implementation's choice. The set of rows follows the
variant's definition.

`pp_encoder` computes the 8 rows of an element. `pc_decoder` computes
the wordlines. Both take `GRP` (1 = FLA, the plain OR multiplier with no
pre-computed rows; 2 = PC2; 3 = PC3) and `TRUNC` as parameters. The
default is `GRP=3, TRUNC=1`.

## 2. A bank: kernels in columns, time steps in rows

```
          col 0 (kernel 0)   col 1 (kernel 1)  ...  col 15 (kernel 15)
 t = 0    8 rows: element 0  8 rows: element 0      8 rows: element 0
 t = 1    8 rows: element 1  ...
 ...
 t = 31   8 rows: element 31 ...
          ACC 0              ACC 1             ...  ACC 15
```

Each column is 16 bits wide and holds one flattened kernel. Each time
step owns 8 consecutive rows. A 256 × 256 bank therefore stores 16
kernels of up to 32 elements.

In each cycle the bank takes one input `x` from its register file. The
decoder turns on the rows of step `t` that `x` selects, and the read
multiplies `x` by element `t` of all 16 kernels at once. A pass of `K`
steps gives 16 dot products of length `K ≤ 32`.

The 16-bit column width and 8 rows per element were derived from the
published geometry: a 512 kB bank holds 128 × 256 kernel elements, and
uses 128 of them at a time. The stored rows keep all 16 bits even under
truncation; only the top byte of each column is passed on. Section 6
discusses this reading.

`daism_bank` contains:

* `input_regfile`: a 32-entry circular register file. The input bus
  fills it with a whole scratchpad word of 16 inputs at a time. The bank
  takes one input out per cycle.
* `pc_decoder` and `pim_sram`. `pim_sram` is the multi-wordline array.
  It has a registered OR read and a row write with a per-bit mask.
* `pp_encoder` and a load sequencer. A kernel element arrives as
  bfloat16. Its 8 rows are written into its column one row per cycle.
* A side store of the kernel elements' signs and exponents. It is read
  together with the SRAM.
* 16 `acc_unit`s, one per column.

## 3. Signs, exponents and the accumulator

The SRAM only multiplies mantissas. Each `acc_unit` handles the rest:

1. **Zero bypass.** If either operand has exponent field 0, the step is
   skipped. The decoder also keeps every wordline off for a zero input.
   Subnormals count as zero; Inf/NaN are not special-cased.
2. **Sign** = XOR of the operand signs.
3. **Exponent add and alignment.** Accumulation is in a signed 40-bit
   fixed-point register. Each operation sets one *block exponent*
   `ebase`: an accumulator LSB is worth `2^(ebase − 268)`, where
   268 = 2·127 + 14. The 16-bit product `{prod_hi, 8'b0}` is shifted left
   by `x_exp + w_exp − ebase`. If that amount is negative it is shifted
   right, and the bits shifted out are lost. A shift beyond 23, or a sum
   outside ±(2^39 − 1), saturates and sets a sticky `ovf`.
4. **Normalisation.** It is done once, when the sum is read out. The
   leading one gives the exponent; the next 7 bits give the fraction,
   truncated. Underflow flushes to zero. Overflow gives the largest
   finite bfloat16.

The host picks `ebase`. It should be no larger than the smallest exponent
sum it cares about, and small enough that `exponent sum − ebase ≤ 23` for
the largest products. For operands near 1.0, `ebase = 248` covers
exponents 124 to 131 exactly. Using a fixed-point accumulator with one
exponent per operation is this implementation's reading of "handled like
block floating point". The widths, saturation and rounding are its own
choices.

## 4. The whole accelerator (`daism_top`)

```
              inputs scratchpad (1024 x 16 bf16)
                     |  input bus: 1 word / cycle, round robin
     +---------------+---------------+------ ... ------+
   REG/DEC/SRAM/ACC  bank 0        bank 1   ...      bank 15
     +---------------+---------------+------ ... ------+
                     |  output bus: 1 result word / cycle, round robin
              outputs scratchpad (1024 x 16 bf16)
```

Host-side operation:

1. **Write inputs** with `in_we/in_waddr/in_wdata`, one word of 16
   bfloat16 values per cycle. A pass reads `ceil(K/16)` consecutive words
   from `op_in_base`.
2. **Load kernels** with `wl_valid/wl_ready` and
   `wl_bank, wl_col, wl_t, wl_data`. Each element occupies the bank for
   9 cycles.
3. **Issue a pass** with `op_valid/op_ready` and
   `op_bank, op_in_base, op_len (1..32), op_out_addr, op_ebase`. Each
   bank queues up to two passes. A pending kernel load goes first. Kernel
   loads are accepted only while the bank is idle.
4. **Read results** with `out_re/out_raddr`; data arrives the next cycle.
   Word `op_out_addr` holds the 16 results of the pass, one per kernel
   column. `ovf_flags[b]` records that bank `b` wrote a saturated result.

Event strobes `ev_step`, `ev_stall` (register file empty while a pass
runs), `ev_out_wait` (result waiting for the output bus) and `ev_bypass`
are outputs for performance counting.

**Timing.**

* A kernel element load takes 9 cycles.
* With an idle input bus, a pass of `K` steps raises `r_valid` `K + 5`
  cycles after the operation is accepted: 2 cycles for the first fetch,
  `K` issue cycles, 1 cycle for the SRAM read, 1 cycle to accumulate and
  1 cycle to capture the sums into the bank's result register.
* The first step of a pass restarts the accumulators. The fetch engine
  prefetches the next queued pass while the current one runs, so queued
  passes follow each other without a gap: their results come out `K`
  cycles apart.
* A result waits in its register until the output bus takes it. If the
  next pass finishes first, the bank's pipeline holds.
* Peak throughput is 16 inputs per cycle (256 MACs per cycle). The input
  bus supplies exactly 16 inputs per cycle, so all 16 banks can be fed
  when `K` is a multiple of 16. In the end-to-end test, 16 banks running
  four queued 32-step passes each reached 218 MACs per cycle over the
  whole phase. That is 85 % of peak, and the figure includes the
  start-up (16 first fetches over one bus) and the drain.

## 5. Files and simulation

`rtl/`:

| file | content |
|------|---------|
| `daism_pkg.sv` | bfloat16 type, widths, row-count formula |
| `pim_sram.sv` | multi-wordline OR-read SRAM array |
| `pc_decoder.sv` | wordline decoder (FLA/PC2/PC3, truncation) |
| `pp_encoder.sv` | stored-row generator |
| `input_regfile.sv` | per-bank input register file |
| `acc_unit.sv` | exponent/sign/zero handling, accumulator, bf16 conversion |
| `daism_bank.sv` | one bank and its sequencer |
| `scratchpad.sv` | 1R1W buffer memory (inputs and outputs) |
| `rr_arbiter.sv` | round-robin arbiter |
| `input_bus.sv`, `output_bus.sv` | bank interconnect |
| `daism_top.sv` | the accelerator |

`tb/` has one self-checking testbench per module, `tb_<module>.sv`, and
`tb_util_pkg.sv` with the reference model. The reference computes each
approximate product from its definition (exact product with the top three
multiplier bits, OR the shifted multiplicand for bits 4..1, keep bits
15:8). It sums the products in real arithmetic and converts the sum with
a truncating real-to-bfloat16 function. Each testbench prints
`TB_RESULT checks=N failures=M`.

To run one:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_daism_top \
    rtl/daism_pkg.sv tb/tb_util_pkg.sv rtl/*.sv tb/tb_daism_top.sv
./obj_dir/Vtb_daism_top
```

`tb_daism_top` runs the full-size design with default parameters. It
builds in under a minute and runs in about 2 s. It preloads all
16 × 32 × 16 kernel elements, then runs:

* 48 passes of length 27 (the 3×3×3 kernels of the first VGG layer);
* 64 full-length passes issued back to back, with a throughput check;
* one saturating pass.

It checks every result word and counts each mechanism: preloads, stalls,
output-bus waits, zero bypasses, overflow, and all four pre-computed rows.
`tb_daism_bank` checks the load time, the `K + 5` pass latency, and the
`K`-cycle spacing of queued passes.

## 6. How far it follows the published design

Taken from the published design:

* the OR multiplier and the FLA/PC2/PC3 and truncation variants;
* the hidden-one row savings;
* kernels stored as columns, with one time step per row group;
* one input per bank per cycle through a register file and decoder;
* one accumulator per column;
* separate sign and exponent handling and zero bypass;
* 16 banks of 8 kB in the main configuration.

This implementation's own choices, where the description is silent:

* the scratchpad sizes (32 kB each) and ports;
* the bus widths and round-robin arbitration;
* the register-file depth;
* the side store for kernel signs and exponents;
* the load and issue handshakes, the two-entry pass queue and the
  pipeline;
* the 40-bit fixed-point accumulator with a per-operation block exponent,
  saturation, truncating bf16 conversion and flush-to-zero;
* hardware generation of the stored rows on kernel load;
* the host interface as a whole, since no controller is described.

Points where the reading is uncertain:

* **Column width.** 16-bit columns with 8 rows per element match the
  stated 512 kB geometry. They also match the quoted 502 GOPS for
  16 × 8 kB, counting 256 MACs as 2 operations each at 1 GHz. Another
  remark suggests that truncation halves the column width. That would
  mean 8-bit columns and 32 multipliers per 8 kB bank. `COLS` and the
  row width are parameters, but the stored rows here keep all 16 bits.
* **Utilisation.** The quoted throughput implies about 98 % utilisation.
  Passes here run back to back, so the steady state is at full rate. The
  residual loss comes from input-bus contention when `K` is not a
  multiple of 16, and from start-up. How the published design keeps its
  banks fed is not described.
* **Long dot products.** A dot product longer than 32 elements (most
  layers beyond the first) must be split into passes, and the host must
  add the bf16 partial results. There is no on-chip partial-sum path.
* **Formats.** Only bfloat16 is built. The float32 variant and other
  bank counts and sizes are not instantiated by default. Bank counts and
  sizes are parameters (`NB`, `ROW_GROUPS`, `COLS`), but only the
  default was simulated.
* **Analog behaviour.** The multi-wordline SRAM is modelled as ideal
  logic (a registered OR of the selected rows). Its circuit-level
  behaviour (sense margins, read disturb) is outside this RTL.
