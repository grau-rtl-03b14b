# GRAU: a reconfigurable activation unit built from shifters

A quantised neural network accelerator turns each integer MAC result into a
low-precision activation. That step folds three things into one function of
the MAC output `x`: batch normalisation, the nonlinearity (ReLU, Sigmoid,
SiLU, ...) and re-quantisation to 1, 2, 4 or 8 bits. The usual reconfigurable
way to do it is a *multi-threshold* unit, which compares `x` against
`2^n - 1` thresholds and counts the ones it passes. That costs 255
comparators for 8-bit outputs, and the cost doubles with each extra output bit.

GRAU approximates the folded function instead. It uses a piecewise linear
function with a few segments (4, 6 or 8). Each segment's slope is limited to
a power of two (PoT) or a sum of distinct powers of two (APoT). Multiplying
by such a slope needs no multiplier: it is a chain of 1-bit right shifters,
each of which either applies its shift or passes the value on (PoT), or
adds its shifted copy to a running sum (APoT). A new function is a new set
of register contents: breakpoints, per-segment shift settings and biases. So
one unit serves every layer, every activation function and every precision
of a mixed-precision network. For 1- and 2-bit outputs, the breakpoints alone
form a small multi-threshold unit, and the result bypasses the shifters.

This repository holds synthesizable SystemVerilog for both architectures:
the pipelined one (one result per clock) and the serialized one (one
comparator and one shifter unit, reused over many cycles), each with PoT or
APoT shifter units. It also holds self-checking testbenches, a bit-exact
reference model, and a testbench that fits real folded activations and runs
them through the hardware.

## 1. The function a core computes

For a signed `IN_W`-bit input `x` (32 bits by default), the core computes:

```
seg  = number of breakpoints t_j with x >= t_j          (0 .. SEGMENTS-1)
xp   = x >>> m                                           (pre-shift, arithmetic)
prod = PoT : xp >>> popcount(bits[seg])                  (0 if bits[seg] == 0)
       APoT: sum over set bits i of (xp >>> (EXPONENTS - i))
p    = sign[seg] ? -prod : prod
y    = clamp(p + bias[seg])    to [-2^(n-1), 2^(n-1)-1] (signed) or [0, 2^n-1] (unsigned)
```

Here `n` is the configured output precision, 4 or 8. In the 1- and 2-bit modes
the result is the count of breakpoints reached, taken over the first 1 or the
first 3 breakpoints. That is exactly a multi-threshold activation.

All shifts are arithmetic, so each shifter stage rounds toward minus
infinity. The APoT product is therefore the sum of per-unit floors, not the
floor of the exact product. The reference model in `tb/tb_grau_ref_pkg.sv`
computes this arithmetic from the formula above, independently of the RTL
structure.

Inputs below the first breakpoint belong to the first segment, and inputs
above the last to the last segment. That is why `S` segments need only `S-1`
breakpoints (5 for the default of 6 segments).

## 2. Slopes as shift patterns

Each segment has a setting word of `EXPONENTS + 1` bits: the sign in bit
`EXPONENTS`, then one bit per shifter unit. Bit `EXPONENTS-1` drives the first
unit in the chain and bit 0 the last. After the pre-shift by `m`, the
units weigh `2^-(m+1)`, `2^-(m+2)`, ..., `2^-(m+EXPONENTS)`. With 16 units and
`m` up to 31, any window of 16 consecutive negative exponents between `2^-1`
and `2^-47` can be used. The window is shared by all segments of one function.

* **PoT unit.** It shifts the value it passes on by one bit when its setting
  bit is 1; otherwise the value passes unchanged. The slope is
  `2^-(m + number of ones)`. The natural pattern is a run of ones from the top
  (for example `1110 0000 0000 0000` for `2^-(m+3)`), but the hardware only
  counts the ones. A PoT chain cannot produce zero, so an all-zero setting
  word is decoded separately as slope 0: a zero flag travels with the item
  and forces the product to 0 at the sign stage.
* **APoT unit.** Every unit shifts its data input by one bit. When its
  setting bit is 1, it adds that shifted value to the running sum. The slope
  is the sum of the weights of the set bits, so all zeros means slope 0
  without special handling.

The sign bit negates the product. A slope of 0 with a non-zero bias gives a
flat segment; the flat tails of Sigmoid and ReLU are written this way.

## 3. The pipelined unit (`grau_pipelined`)

```
 in ─► threshold pipeline ─► settings buffer ─► setting loader ─► bit k delayed k cycles ─┐
        (S-1 stages,          (look-up table,   (1 register)                                 │
         count = segment)      read at count)                                                ▼
       └──────────────────────────────────────► Init (x >>> m, 1 register) ─► SU 1 ─► SU 2 ─► … ─► SU E
                                                                                              │
                                   sign, zero flag, bias, precision delayed E cycles ─► sign ─► bias+clamp ─► y
```

**Threshold pipeline** (`grau_threshold_pipe`). This has `SEGMENTS-1`
register stages. Stage `j` compares the item with breakpoint `j` and adds the
outcome to the count the item carries. The count leaving the last stage is
the segment index. The paper's "Encode" step is therefore the identity here.

**Settings buffer and loader** (`grau_setting_buffer`, `grau_setting_loader`).
The buffer is a register file with one entry per segment: sign, shifter bits
and bias. It is read combinationally at the count, and the loader registers
the entry. In the same cycle, `grau_init` registers `x >>> m`.

**Skewed setting bits.** The item then walks down the chain of shifter units
(`grau_su_pipeline`), one unit per cycle. Shifter unit `k` must see the item's
setting bit `k` in the cycle the item reaches it. The loader therefore delays
bit `k` by `k` cycles through a private chain of `k` flip-flops. This is the
diagonal pattern of registers: unit 0 reads the loaded bit directly, and unit
15 reads it 15 cycles later. Each item carries its own settings down the
pipeline. Consecutive items from different segments therefore never
interfere, and throughput is one item per clock.

The sign bit, the zero flag, the bias and the item's precision need to
arrive at the output stage only, so they take one `EXPONENTS`-cycle delay
line. An assertion checks that the product and these fields arrive in the
same cycle.

**Output stage** (`grau_output`). It has two registers: sign (with the zero
flag), then bias addition with the clamp to the output range.

**Latency** for 4/8-bit outputs is `(SEGMENTS-1) + 1 + EXPONENTS + 2 =
SEGMENTS + EXPONENTS + 2`, which is 24 cycles at the defaults. This formula
gives the 14/22/16/24/18/26 cycles reported for the 4/6/8-segment ×
8/16-exponent instances.

**Bypass.** In 1-bit mode, the count after the first threshold stage is the
result; it leaves after 1 cycle. In 2-bit mode, the count after the third
stage is the result; it leaves after 3 cycles. A 1/2-bit item is not
forwarded into the rest of the pipeline. The output mux takes the 1-bit tap,
then the 2-bit tap, then the full path. Because precision changes only when
the unit is idle, two results never compete for the mux; an assertion checks
this. `busy` is high while any item is in flight.

There is no back-pressure. The unit accepts one item per clock and delivers
results in order, with a fixed latency for each precision.

## 4. The serialized unit (`grau_serial`, `grau_serial_ctl`)

The serialized unit keeps the same blocks but only one of each
computational element: one comparator, one shifter unit, and a shift register
in place of the loader's diagonal. The controller walks one item through
these states:

| state  | cycles            | what happens |
|--------|-------------------|--------------|
| IDLE   | 1 (accept)        | `in_ready` is high; the item and the current precision are latched |
| THRESH | 1 per breakpoint  | the comparator checks breakpoint 0, 1, ...; a counter counts hits; 1-bit items stop after one comparison, 2-bit items after three |
| BYP    | 1                 | 1/2-bit result: the count is the output |
| LOAD   | 1                 | settings buffer read at the count; shifter bits go into the shift register; the data register takes `x >>> m` |
| SHIFT  | EXPONENTS         | one setting bit per cycle, MSB first, applied by the shifter unit to its own registered outputs |
| FIN    | 1                 | product, sign, zero flag and bias go to the shared output stage |

Results appear 2 cycles (1-bit), 4 cycles (2-bit) or `SEGMENTS + EXPONENTS + 3`
cycles (4/8-bit, 25 at the defaults) after the item is accepted. The next
item is accepted once the controller is back in IDLE. The input is a
valid/ready handshake; the output is a one-cycle `out_valid` pulse.

## 5. Configuration

All cores share one write bus, `grau_pkg::cfg_wr_t` `{we, sel, idx[7:0], wdata[31:0]}`.
A write takes effect at the next clock edge.

| `sel`         | `idx`          | `wdata` |
|---------------|----------------|---------|
| `CFG_THRESH`  | breakpoint 0 .. S-2 | signed breakpoint |
| `CFG_SETTING` | segment 0 .. S-1    | bit E = sign (1 = negative slope), bits E-1..0 = shifter bits |
| `CFG_BIAS`    | segment 0 .. S-1    | signed bias |
| `CFG_GLOBAL`  | –                   | bits 4:0 = pre-shift `m`, bits 6:5 = precision (0: 1-bit, 1: 2-bit, 2: 4-bit, 3: 8-bit), bit 7 = signed output |

After reset, every register is zero except the precision, which is 8-bit,
and the output signedness, which is signed. Change the configuration only
while `busy` is low. The datapath reads the registers live, so a write while
items are in flight would mix the old and new functions.

Breakpoints must be in ascending order for the count to equal a segment
index. A function with fewer segments than the hardware has can be loaded
in two ways:

- Repeat its last breakpoint. The segment between two equal breakpoints can
  never be selected.
- Park the unused breakpoints at the largest input value, `2^31 - 1`.

In 1-bit and 2-bit modes only breakpoints 0 and 0..2 matter. They are the
multi-threshold thresholds.

`grau_top` holds four cores: pipelined PoT, pipelined APoT, serialized PoT
and serialized APoT. A write goes to every core whose bit is set in
`cfg_core_mask`. Each core has its own input and output streams. An
accelerator that needs one variant would instantiate `grau_pipelined` or
`grau_serial` directly.

## 6. Preparing a function

The hardware only evaluates the function; fitting happens offline. The flow
used in `tb/tb_grau_workloads.sv`, written in SystemVerilog there, is:

1. Sample the folded function `f(x) = clamp(round(act(a*x + b)/s) + zp)` at
   1000 evenly spaced points over twice the layer's MAC range.
2. Choose breakpoints greedily. Start with one segment covering the whole
   range. Find the sample farthest from its segment's chord and round its
   position to an integer. Split there if the split lies inside the segment,
   is at least a minimum gap from the segment's ends, and the distance
   exceeds a minimum. Repeat until the segment budget is used or no split
   qualifies.
3. Fit a least-squares line per segment.
4. Pick `m` so that the window's top weight `2^-(m+1)` is the smallest power
   of two not below the largest slope.
5. Round each slope to the nearest code in the 4-, 8- or 16-exponent window.
   For PoT this is the nearest single power; for APoT it is the slope
   rounded to a multiple of the window's smallest weight.
6. Set the bias so that the quantised line passes through the fitted line's
   value at the segment's left breakpoint.

For 2-bit layers, the three thresholds are the inputs at which `f` first
reaches codes 1, 2 and 3.

Mean absolute errors against the exact folded function come out at these
levels:

- 4-bit layers: 0.1–0.8 LSB.
- 8-bit layers, APoT with 6–8 segments: 0.2–1.3 LSB.
- 8-bit layers, PoT: up to about 7 LSB with 4 segments on ReLU. A single
  power of two fits a ReLU ramp badly.
- Error generally falls as segments are added, and APoT beats PoT in most
  cases. This is the trend one expects from the approximation.

These are properties of the fitting flow and the slope quantisation, not
network accuracies.

## 7. Sizes

| parameter   | default | meaning |
|-------------|---------|---------|
| `SEGMENTS`  | 6  | segments; `SEGMENTS-1` breakpoints and threshold stages |
| `EXPONENTS` | 16 | shifter units, i.e. the width of the slope window |
| `IN_W`      | 32 | MAC result width; also the width of breakpoints, biases and the datapath |
| `SU_KIND`   | `SU_APOT` | `SU_POT` or `SU_APOT` (top instantiates both) |
| output      | 8 bits | 1/2/4/8-bit modes, sign-extended in 8 bits |

6 segments × 16 exponents is the instance whose 24-cycle latency is quoted
as the reference point. The other evaluated instances (4 or 8 segments, 8
exponents) are the same RTL with different parameters. The 32-bit input width
is an assumption. 8-bit ResNet-18 on ImageNet produces MAC results of about
±10^5, which is 18 bits, so 32 bits covers it with margin.

## 8. Where this RTL departs from the paper, and what it adds

The block structure and order, the shifter units, the setting word (sign
plus one bit per unit), the pre-shift, the bypass latencies and the pipelined
latency follow the published description. The following are this design's
own choices or readings:

- **Init placement.** The published pipelined diagram feeds Init straight
  from the MAC, in parallel with the thresholds. Here Init registers the value
  leaving the threshold pipeline, in the same cycle as the settings load.
  The arithmetic and the cycle count are the same.
- **Serialized timing.** The serialized controller's states and cycle counts
  are not published. The ones above are this design's: one comparison per
  cycle, and an early stop for 1/2-bit outputs.
- **Sign convention.** The published encoding figure contradicts itself:
  one example prints sign 0 next to a negative slope, the other sign 0 next
  to a positive one. This RTL uses 1 = negative.
- **PoT patterns.** The PoT chain shifts by the number of ones in the
  setting, in any arrangement. The published text asks for consecutive ones;
  that is a valid subset. The all-zero word means slope 0, as published; this
  needs the extra zero flag described in section 2.
- **Clamp and signedness.** The clamp to the output range, the per-function
  signed/unsigned choice and the clamp's placement in the bias stage are this
  design's. The published text shows only that the output saturates at the
  signed 8-bit range.
- **Register map.** The bus, the register map, the reset values and the rule
  that configuration changes only while idle are this design's. Nothing in
  the RTL guards against writes while busy.
- **Fixed window position.** Only negative exponents `2^-(m+1)..2^-(m+E)` are
  built, as in the published hardware. The wider early encodings with
  positive exponents (ranges [-10, 6) and [-24, 8), 16 and 32 bits) cannot
  be programmed.
- **Four cores in the top.** Putting all four variants in one top is
  packaging for testing, not an architecture.
- **Not included.** The MAC array that produces the inputs belongs to the
  host accelerator and is not part of this design.

## 9. Verification

Every block has its own self-checking testbench in `tb/`. The testbenches
compare against values computed independently, mostly through
`tb_grau_ref_pkg`.

- **`tb_grau_pipelined` and `tb_grau_serial`.** They run both slope kinds
  through these configurations:
  - a ReLU-like 4-bit unsigned function;
  - a non-monotonic SiLU-like 8-bit signed function;
  - random functions in all four precisions.

  They check every output value and its exact cycle count. They also count
  the mechanisms exercised: both bypasses, the full path, the clamp at both
  ends, negative and zero slopes, precision switches, reconfigurations and
  input stalls (serialized unit). A testbench fails if any of these never
  happened.
- **`tb_grau_top`** does the same for all four cores at once, with every
  parameter at its default. It covers a mixed-precision sequence 8/4/2/4/8/1.
- **`tb_grau_workloads`** runs the fitted ReLU/Sigmoid/SiLU layers of
  section 6 on twelve pipelined units at once: 4, 6 and 8 segments × 8 and
  16 shifter units × PoT and APoT. The layers are:
  - single-precision 4-bit and 8-bit layers with 4-, 8- and 16-exponent
    windows;
  - VGG16-style 8/4/2/4/8 mixed-precision sequences;
  - ResNet-18-style sequences with SiLU in the fourth stage.

  It checks every output bit-exactly against the model, and checks each
  output's latency, 14 to 26 cycles depending on the instance.

Each testbench was also run against a deliberately broken copy of its block,
and it reported failures every time. The reference model shares the
arithmetic definition with the RTL, not its structure. A misreading of the
published design that the two share would not be caught. The points in
section 8 are where such misreadings are most likely.

## 10. Simulating and changing it

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/grau_pkg.sv tb/tb_grau_ref_pkg.sv tb/tb_grau_top.sv --top-module tb_grau_top
./obj_dir/Vtb_grau_top
```

To run another test, substitute its file and module name, for example
`tb_grau_workloads` or `tb_grau_su_pipeline`. Each test ends with a line
`TB_RESULT checks=N failures=M`. The full-size top test and the workload test
take seconds.

To change the architecture, set `SEGMENTS`, `EXPONENTS` and `IN_W` on
`grau_pipelined`, `grau_serial` or `grau_top`; the latencies follow the
formulas above.

- A wider slope window means more shifter units.
- More segments means more threshold stages and more buffer entries.
- The pre-shift field is 5 bits (`PRE_W` in `grau_pkg`). Widen it if `IN_W`
  grows past 32.
- The configuration index is 8 bits, enough for 256 segments.

Files in `rtl/`:

| file | content |
|------|---------|
| `grau_pkg.sv` | precision and shifter-kind enums, configuration bus type, constants |
| `grau_su_pot.sv`, `grau_su_apot.sv` | one shifter unit of each kind |
| `grau_su_pipeline.sv` | the registered chain of shifter units |
| `grau_threshold_pipe.sv` | breakpoint comparisons, segment count, 1/2-bit taps |
| `grau_setting_buffer.sv` | per-segment look-up table |
| `grau_setting_loader.sv` | load register, bit skew, side-band delay |
| `grau_init.sv` | pre-shift register |
| `grau_output.sv` | sign, bias, clamp |
| `grau_config.sv` | configuration registers and decode |
| `grau_pipelined.sv` | pipelined core |
| `grau_serial_ctl.sv`, `grau_serial.sv` | serialized controller and core |
| `grau_top.sv` | four cores on one configuration bus |
