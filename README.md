# Exponent indexed accumulators

Adding many floating point numbers exactly is expensive in the usual way.
Each addition aligns two mantissas, adds them, normalises and rounds. This
design avoids all of that. It keeps one fixed point partial sum per exponent
value (or per small group of exponent values). Each incoming number is added
into the partial sum its exponent selects, without any alignment against the
other numbers. Only when the total is wanted are the partial sums combined.
This second step, the reconstruction, walks from the lowest exponent to the
highest with a short adder and a right shift. It produces the exact sum a
few bits per cycle.

The result is exact, with no rounding of intermediate values. The
accumulation step costs one small adder plus a register file access per
number. The same core serves plain adders, floating point multiply
accumulators (MACs), a MAC for logarithmic numbers, an adder that takes four
numbers per cycle, and a 4x4 matrix multiply unit. All of these are in
`rtl/`.

## 1. Partial sums indexed by exponent

An input is a sign, an exponent index `e` and an unsigned magnitude `m` with
`MW` bits. Its value is `(-1)^s * m * 2^e`. The index is split into two
parts:

* the low `K` bits, `e & (2^K-1)`, shift the magnitude left by 0 to
  `2^K-1` places;
* the high bits, `e >> K`, select one of `NG = 2^(EI-K)` partial sum
  registers. Here `EI` is the width of the exponent index.

The shifted magnitude is added to or subtracted from that register. Register
`g` therefore holds a signed integer whose unit is `2^(g*2^K)`. The two
extreme settings are:

* `K = 0`: one register per exponent and no shifter;
* `K = EI`: a single register, which is a plain wide fixed point
  (Kulisch) accumulator.

Values in between trade register count against shifter and register width.

Each register is `PSW = MW + 2^K + NV` bits wide, two's complement:

* `MW + 2^K - 1` bits hold one shifted magnitude;
* one bit holds the sign;
* `NV` guard bits absorb carries. `NV = 12` is the default everywhere.

With `NV` guard bits, at least `2^NV = 4096` maximal numbers of one group can
be added before a register can overflow. Real data rarely comes close to
that. Overflow is not detected: the register wraps.

The register file is an array of flip-flops (`eia_regfile`) with
combinational read. Read, add and write of the selected register happen in
the same clock cycle, so one number is accepted per cycle with no hazard. A
synchronous `clear` zeroes every register at once. This is cheap with
flip-flops and lets a reconstruction skip registers it does not read.

A number that is zero is recognised and not written.

## 2. Reconstruction

Reconstruction is the least obvious part of the design. The idea is that the
partial sums overlap in weight. Register `g+1` has a unit `2^(2^K)` times
larger than register `g`, but register `g` is wider than `2^K` bits.
Combining them is a long addition in base `2^(2^K)`, done one digit per
cycle (`eia_recon`):

```
acc = 0
for g = lo .. hi:            # one group per cycle
    sum  = acc + S[g]        # signed, PSW+1 bits
    emit sum[2^K-1:0]        # next 2^K result bits, least significant first
    acc  = sum >>> 2^K       # arithmetic shift
result = acc                 # the remaining top bits, signed
```

The accumulator needs only one bit more than a partial sum. It receives one
partial sum per cycle and loses `2^K >= 1` bits to the shift each cycle, so
it cannot grow further.

**Result format.** A pass over groups `lo..hi` gives `n = hi-lo+1` words of
`2^K` bits on `bits_out`, one per cycle with `bits_valid` high. It then gives
the signed top part `result`, which is valid in the same cycle as the last
word. The exact sum is

```
( sum_{c=0}^{n-1} bits_c * 2^(c*2^K)  +  result * 2^(n*2^K) ) * 2^(lo*2^K)
```

in units of the input's exponent index. `lsb_grp` reports `lo`. The words
are unsigned digits and only `result` carries the sign. A host that wants a
float rounds this integer once. Rounding is not part of the design.

**Which groups are read.** The sequencer `eia_seq` supports three choices,
taken from `recon_mode` when `recon_start` is pulsed.

* *Exact with tracking* (`TRACK=1`). The lowest and highest group written
  since the last pass are recorded, and only those are read. A pass takes
  `max-min+1` cycles. Each register is cleared as it is read, so the unit is
  empty again for the next sum.
* *Truncated* (`mode.truncate`). Reading starts at `max(min, max-depth)`.
  The result then lacks the contribution of the lowest groups, which is
  acceptable when only the top bits matter. `depth` is a run-time value. To
  empty the registers that were skipped, the last read also pulses
  `clear_all`, the common synchronous clear.
* *Keep* (`mode.keep`). Nothing is cleared and the min/max record is
  kept. The result is a snapshot of the running total, and accumulation
  can continue afterwards.

Without tracking (`TRACK=0`, as in the tensor core) a pass always covers all
`NG` groups. If nothing was written since the last pass, a single read of
group 0 gives a result of zero.

Accumulation and reconstruction share the register file's port. Numbers are
therefore refused (`ready` low) while a pass runs. Numbers given in the same
cycle as `recon_start` are still included. The reconstruction adder is a
separate adder, not the accumulation adder time-shared.

## 3. The units

| module | what it adds | default format | K | registers x width |
|---|---|---|---|---|
| `fp_accumulator` | one float per cycle | fp32 | 4 | 16 x 52 |
| `fp_mac` | one product a*b per cycle | bfloat16 | 3 | 64 x 36 |
| `fp_mac` in the top | as above | fp8 E4M3 / E5M2 | 0 | 32 x 21 / 64 x 19 |
| `log_mac` | one product of logarithmic numbers | log4.3 | 0 | 32 x 21 |
| `fp_parallel_accum` | four floats per cycle | bfloat16 | 3 | 32 x 28 |
| `tensor_core` | C += A*B, 4x4 matrices, per cycle | bfloat16 | 3 | 64 MACs x 64 x 36 |

**Floats** (`fp_unpack`). The hidden one is restored, which gives `NM+1`
magnitude bits. The biased exponent field is used directly as the exponent
index. No bias is subtracted: the bias only moves the result's fixed scale,
for example `2^-(BIAS+NM)` per unit for a plain float. Subnormals use
exponent 1 with hidden bit 0, which makes them exact too. Infinities and NaNs
are not special: their bit patterns are accumulated like any other number.

**Float MAC** (`fp_mult_stage`, `fp_mac`).

* The product's sign is the XOR of the two signs.
* Its exponent index is the sum of the two biased exponent fields. This
  needs `NE+1` bits, so bfloat16 has 512 product exponents, or 64 groups at
  `K = 3`.
* Its magnitude is the full `2*(NM+1)`-bit mantissa product, so no bit is
  lost.

A pipeline register separates the multiplier from the accumulation stage.
`recon_start` passes through the same register, so it stays in step with the
products. The result's unit is `2^(lsb_grp*2^K - 2*BIAS - 2*NM)`.

**Logarithmic MAC** (`log_frac_lut`, `log_mac`). A log4.3 number is
`s | ei | ef`. It stands for `(-1)^s * 2^(ei.ef)`, where `ei.ef` is an
unsigned fixed point number with 4 integer bits and 3 fraction bits.

* Multiplying two of them is one addition of the 7-bit exponents, plus an
  XOR of the signs.
* The integer part of the sum, 5 bits including the carry, becomes the
  exponent index.
* The 3 fraction bits address an 8-entry table giving
  `round(2^7 * 2^(f/8))`: 128 140 152 166 181 197 215 235. The table is
  computed at elaboration from the parameters, not stored in a file.
* The code `0x00` is reserved for zero, and a product with a zero operand is
  not written.

The unit is `2^(lsb_grp*2^K - 7)`.

**Four numbers per cycle** (`route_add`, `fp_parallel_accum`). The register
file has four ports. Each lane turns its float into a signed, shifted
mantissa and a group number.

Two lanes with the same group must not write the same register. `route_add`
merges them instead:

* lane `i` forwards `m_i` plus the mantissas of all later lanes `j > i` whose
  group equals its own;
* lane `j` may write only if no earlier lane has its group.

Each distinct group is written exactly once per cycle, by the first lane
that holds it. Every port then does its own read, add and write. The
register file asserts that two enabled ports never share an address.
Reconstruction uses port 0 only, and tracking watches all four lanes.

**Tensor core** (`tensor_core`).

* Element `c[r][l]` is served by a chain of four MACs. MAC `j` accumulates
  `a[r][j]*b[j][l]`, with its own 64 partial sums. That makes 64 MACs in
  all, and one full 4x4x4 matrix product is accepted every cycle.
* For reconstruction, a single sequencer issues the group addresses. MAC `j`
  reads its register for a group `j` cycles after MAC 0 and adds it to the
  running sum passed down the chain. After the fourth stage, one
  reconstruction stage per element sees the sum of the four partial sums
  for that group.
* A pass costs the same number of cycles as one MAC's pass plus four cycles
  of chain latency. It always covers all 64 groups, because the tensor core
  does no min/max tracking.
* The chain sum is `PSW+2` bits wide and the reconstruction accumulator
  `PSW+3` bits.

## 4. Interface and timing

Every unit has the same handshake:

1. Give operands with `in_valid` while `ready` is high, one set per cycle.
   `fp_parallel_accum` has one valid bit per lane.
2. Pulse `recon_start` for one cycle, with `recon_mode` (`truncate`, `keep`,
   `depth`) valid in that cycle. `ready` drops during the pass.
3. The first `bits_out` word comes two cycles after `recon_start` in the
   plain accumulator. The MACs add one cycle for the pipeline register, and
   the tensor core adds four more for the chain.
4. Words then follow on consecutive cycles. `result_valid` is high together
   with the last word.
5. `ready` returns after the last read, and a new sum can start at once.

Reset is synchronous and active low. It zeroes the partial sums and the
min/max record. A start while a pass is running is a protocol error that
an assertion reports.

`eia_top` places one of each unit side by side, with port prefixes `tc_`,
`e4_`, `e5_`, `bf_`, `lg_`, `acc_` and `par_`. They share the clock, reset
and `recon_mode`. Without parameters it is the configuration in the table
above, and it synthesises to about 5,300 flip-flop bits plus 154,000 bits of
register file storage.

## 5. Files

`rtl/` holds the following:

* `eia_pkg`: the mode struct and the sequencer states;
* `eia_regfile`: multi-port flip-flop storage;
* `eia_recon`: the reconstruction stage;
* `eia_seq`: phase control and min/max tracking;
* `eia_accum_core`: read, add and write of the partial sums;
* `eia_accumulator`: core, sequencer and reconstruction together;
* `fp_unpack`, `fp_mult_stage`, `log_frac_lut`, `route_add`: the front ends;
* `fp_accumulator`, `fp_mac`, `log_mac`, `fp_parallel_accum`, `tensor_core`:
  the units;
* `eia_top`: the top level.

`tb/` holds one self-checking testbench per module, named `tb_<module>`.
There are also three helpers:

* `tb_collect` reassembles the output words into one integer;
* `tb_fp_mac_run` runs one MAC configuration;
* `tb_fp_acc_run` runs one accumulator configuration for `tb_eia_formats`.

The testbenches draw random operands with `$urandom`. They compute the exact
sum independently in wide integers from the IEEE or log-number definition,
and compare it with the reassembled output. They also check the pass length
in cycles: `max-min+1` words with tracking, `NG` words plus chain latency in
the tensor core, and no stall during accumulation.

`tb_eia_top` drives all seven units at the default sizes. It exercises
every mechanism and fails if any of them never happened:

* stalls;
* zero operands;
* subnormals;
* same-group merging in the four-lane adder;
* exact, truncated and keep passes;
* the tensor core chain.

It runs in well under a minute.

`tb_eia_formats` covers the format and group-size space. It runs 39
`fp_accumulator` configurations side by side: fp32, bfloat16, fp16 and fp8
E5M2, E4M3 and E3M4, each with every `K` from 0 to `NE`. Each
configuration does four random exact summations. Two of them also add one
sequence of 20,000 numbers. The helper `tb_fp_acc_run` drives one
configuration.

## 6. Simulating

Every file in `rtl/` is needed by the top, and `eia_pkg.sv` must come first.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_eia_top \
    rtl/eia_pkg.sv $(ls rtl/*.sv | grep -v eia_pkg) tb/tb_collect.sv tb/tb_eia_top.sv
./obj_dir/Vtb_eia_top +verilator+rand+reset+2
```

For another block, replace the top module and its testbench file. Add
`tb/tb_fp_mac_run.sv` for `tb_fp_mac`, and `tb/tb_fp_acc_run.sv` for
`tb_eia_formats`. Each testbench prints one line
`TB_RESULT checks=<n> failures=<n>` and stops. A watchdog ends it with a
failure if it hangs. The simulation is two-state, and every register that is
read is reset, so random initial values do not matter.

Formats are changed through parameters:

* `fp_accumulator #(.NE(5), .NM(10), .K(2))` is an fp16 adder;
* `fp_mac #(.NE(4), .NM(3), .K(0))` is the E4M3 MAC;
* `log_mac #(.NEI(4), .NEF(3))` is the log4.3 MAC.

Widths follow from the formulas above. `NV` sets the guard bits.

## 7. How far this follows the source, and where it departs

These parts follow the published description: the scheme itself, the
partial sum width `MW + 2^K + NV`, the reconstruction loop, min/max
tracking, truncated reconstruction and skipping the clear, the route-and-add
merge and the four-port write, the tensor core chain with four cycles of
extra latency, the log4.3 format and its 8-entry table, `NV = 12`, and `K`
values of 0 for fp8 and log4.3 and 3 for bfloat16.

The following are this design's own choices:

* **Interface.** The valid/ready handshake, the `recon_mode` struct and the
  result format (digits plus a signed top part).
* **Bias.** The original MAC drawing has a bias-adjust input on the
  exponent adder. Here no bias is subtracted. The sum of biased exponents is
  used as the index, and the bias appears only in the result's scale. This
  keeps every product, including very small and very large ones, exact.
* **Exponent index width.** The sum of two exponents is `NE+1` bits.
* **Special values.** Subnormals are handled as above. Inf/NaN are not
  treated specially.
* **MAC datapath.** The pipeline register sits between multiplier and
  accumulator. The product keeps all its bits.
* **Log table.** The table is rounded to nearest with the leading one at bit
  7. The source gives the table's size but not its values.
* **Formats.** fp32 with `K = 4` for the adder, and bfloat16 with `K = 3`
  for the four-lane adder. The source evaluates many formats and `K` values
  without picking one.
* **Resources.** No adder is shared between the two phases. The register
  files are flip-flop arrays, not vendor LUT-RAM or DSP slices, and
  multiplication is a plain `*`.
* **Width discrepancy.** The drawings of the float and log MACs print a
  partial sum one bit wider than `MW + 2^K + NV`. The narrower formula,
  which is enough, is used throughout.
* **Clearing after a truncated pass.** The skipped groups are cleared in one
  cycle, which needs flip-flop storage. With RAM storage they would have to
  be cleared one address at a time. That variant is not built.

**Not included.** The MAC for posit numbers is described only in outline,
and the entropy coding used to compress log-format weights is not designed
in hardware detail. Neither is part of this RTL.
