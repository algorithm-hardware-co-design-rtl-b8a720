# Twin-range SAR ADC control for ReRAM crossbar accelerators

In a ReRAM crossbar accelerator the analog matrix-vector product is cheap and the
analog-to-digital conversion of each bit line is expensive: the ADCs take most of
the power. A successive-approximation (SAR) ADC spends one comparator decision, an
*A/D operation*, per output bit, so its energy per conversion is proportional to
the number of operations it performs. The bit-line values of a neural network are
very skewed: most are small, a few are large. A plain binary search spends the same
eight operations on all of them.

This RTL implements *twin-range quantisation* (TRQ) in the digital part of the SAR
ADC, leaving the DAC and comparator untouched. Each conversion first checks
whether the held voltage lies in a narrow range R1 near zero. If it does, the ADC
binary-searches only R1, which takes a few fine steps ("early bird"). If it does
not, the ADC binary-searches the whole scale with fewer, coarser steps ("early
stopping"). The result is a compact code: a range bit plus a few value bits. The
shift-and-add unit that accumulates bit-sliced partial products decodes the code
with nothing more than a shift. On the skewed test data of the end-to-end
testbench, an ideal-case configuration uses 4.1 A/D operations per conversion
instead of 8.

The design covers one processing element (PE) of an ISAAC-style accelerator:

```
 in_vec ──► sequencer ──wl──► Pos/Neg crossbar ──bl──► sample&hold ──► mux ──Vin──┐
             │  │                                                               │
             │  └── start/done ──► SAR logic ◄── vcomp ── comparator ◄── S/R ◄──┘
             │                      │   └─ dac_idx ──► DAC ───────┘
             │                      │ code (range bit + value)
             └── #W,#In,sign,col ──►shift controller ► shift reg ► adder ► psum[16]
                    config register (mode, N_R1, N_R2, M, Delta_R1, Bias) ─┘
```

## One conversion

Voltages are counted in units of V_grid, the step of the ADC's full-precision
8-bit grid. The DAC threshold of index `i` is at `(i - 1/2)·V_grid`, and the
comparator says 1 when the held voltage is at or above it. All step sizes are
powers of two of V_grid, so every threshold the twin-range search asks for is one
the unmodified DAC already produces.

With `th = 2^N_R1 · Delta_R1`, range R1 is `[bias·th, (bias+1)·th)`.

**Twin-range mode.**
1. Detection phase. The ADC compares with the upper edge of R1. If Bias is not
   zero, it also compares with the lower edge. This costs nu = 1 or 2 operations.
2. Inside R1, the ADC binary-searches `N_R1` bits with step `Delta_R1`, starting
   at the lower edge. Code: range bit 0, value `floor((u - bias·th) / Delta_R1)`.
3. Outside R1, the ADC binary-searches `N_R2` bits with step
   `Delta_R2 = 2^M · Delta_R1` over the whole scale. Code: range bit 1, value
   `min(floor(u / Delta_R2), 2^N_R2 - 1)`.

The operation count is nu + N_R1 or nu + N_R2.

**Uniform mode.** There is no detection phase. The ADC performs an `N_R2`-bit
search with step `Delta_R2`, and the code carries range bit 1. With `N_R2 = 8`,
`M = 0` and `Delta_R1 = 1` this is the ordinary full-precision 8-bit ADC. That is
the reset configuration.

When `Delta_R1` is one grid step, R1 is converted without any loss ("ideal
case"). With `N_R2 + M = 8`, R2 keeps the full numerical range at reduced
precision.

Example, with 3-bit codes, `N_R1 = N_R2 = 2`, `M = 3` and R1 = [0, 4):
- Codes 000 to 011 stand for 0, 1, 2 and 3.
- Codes 100 to 111 stand for 0, 8, 16 and 24.

Every conversion costs 3 operations instead of 5.

If a trial threshold lies at or above full scale (2^8), the DAC is not driven and
the decision is taken as 0. The cycle still counts as an operation.

## Code format and decoding

`adc_code_t` is `{r2, value[7:0]}`. The shift-and-add unit turns it into a number
in units of `Delta_R1`:

```
r2 = 1 :  value << M
r2 = 0 :  (bias << N_R1) | value        (Bias concatenated on the left)
```

It then shifts the number left by `#W + #In`. `#W` is the weight bit that the
bit line holds, and `#In` is the input bit cycle. The unit adds the result to the
16-bit partial sum of the output column, or subtracts it for the negative
crossbar. The partial sums wrap in two's complement. The scale factor
`Delta_R1` itself is not applied. It belongs to the layer's quantisation scale,
downstream of this unit.

## Configuration register

| addr | field | meaning | range used |
|---|---|---|---|
| 0 | mode | 0 uniform, 1 twin-range | |
| 1 | N_R1 | value bits in R1 | 0..8 (saturates) |
| 2 | N_R2 | value bits in R2 / uniform | 0..8 |
| 3 | M | log2(Delta_R2 / Delta_R1) | 0..8 - N_R2 |
| 4 | dr1 | log2(Delta_R1) in V_grid | 0..8 |
| 5 | Bias | R1 offset, in units of 2^N_R1·Delta_R1 | 0..255 |

Writes take effect at the next clock edge. A write to address 6 or 7 is ignored
and raises `wr_err` for one cycle. In `trq_pim_pe`, writes made while an MVM runs
are dropped. The SAR logic captures the configuration at the start of every
conversion.

## Processing element and its schedule

- **Crossbars.** The positive and the negative crossbar each have 128 rows and
  128 bit lines, with 1-bit cells. Bit `b` of weight column `j` sits on bit line
  `8j + b`. Bit lines 0..127 are the positive crossbar, and 128..255 are the
  negative one, which holds `max(-w, 0)`. Each crossbar therefore holds 16
  signed 8-bit weights per row.
- **Input cycles.** The inputs are unsigned and 8 bits wide. They are applied
  one bit per cycle, LSB first.
- **Conversions.** After each input bit the sample-and-hold array captures all
  256 bit lines. The single ADC then converts them in order 0..255 through the
  multiplexer.
- **Conversion timing.** A conversion takes `nops + 2` cycles from `start` to
  `done`: one sample cycle, one cycle per A/D operation, and the done cycle. The
  next conversion starts in the previous one's done cycle.
- **MVM timing.** One MVM takes `4 + 2·8 + Σ(nops + 2)` cycles over its 2048
  conversions, counted from the start cycle to the done cycle. At full precision
  that is 20,500 cycles. In the ideal-case TRQ run of the end-to-end test it is
  12,439 cycles.
- **Row blocks.** A layer with more than 128 inputs is split into row blocks.
  Start each block after the first with `acc = 1`, and its products are added
  to the kept partial sums instead of replacing them.
- **Observation ports.** `conv_*` report every conversion, and `adops_total`
  counts A/D operations, which is the ADC's energy measure.

## Files

| file | kind | content |
|---|---|---|
| `rtl/trq_pkg.sv` | package | `R_ADC`, `trq_cfg_t`, `adc_code_t`, `decode_code` |
| `rtl/trq_cfg_reg.sv` | RTL | configuration register |
| `rtl/trq_sar_logic.sv` | RTL | twin-range SAR control |
| `rtl/trq_shift_add.sv` | RTL | decoding shift-and-add, 16 partial sums |
| `rtl/trq_pe_ctrl.sv` | RTL | input-cycle / bit-line sequencer |
| `rtl/sar_adc_analog.sv` | behavioural model | S/R, DAC, comparator |
| `rtl/reram_xbar_pair.sv` | behavioural model | Pos/Neg crossbar, 1-bit cells |
| `rtl/bl_sample_hold.sv` | behavioural model | per-bit-line sample-and-hold |
| `rtl/bl_mux.sv` | behavioural model | analog multiplexer to the ADC |
| `rtl/trq_pim_pe.sv` | top | one PE with ADC and shift-and-add |

The behavioural models stand in for analog circuits. Each represents a voltage
as an integer number of V_grid steps. They are written so that the digital logic
can be simulated around them, and they are not meant for synthesis into a
product.

## Where this RTL departs from, or goes beyond, the source description

- **Bias.** The method defines the offset as `bias·V_ref/2^M`, but also says the
  bias bits are concatenated to the left of the R1 code when decoding. The two
  agree only in special cases. This RTL follows the concatenation, so
  R1 = `[bias, bias+1)·2^N_R1·Delta_R1`, and the decoded value is then
  consistent.
- **Rounding.** The quantiser is specified with round(). The hardware searches
  on the DAC's own half-LSB-offset grid. The result is exact rounding when
  `Delta = 1` grid step and floor-like on the coarser grid otherwise.
- **Uniform mode details.** Uniform mode uses the R2 step and marks its codes as
  R2, the detection comparisons run upper edge first, and every step takes one
  clock. All three are choices of this design.
- **Numbers.** `R_ADC = 8` follows the statements "8 bit/conversion" and
  "log2 S + 1 bits". The general resolution formula would give 9.
- **Signs.** Inputs are unsigned. The source quantises activations
  symmetrically to 8 bits but does not say how signed inputs are fed bit-serially.
  Negative weights go to the negative crossbar and are subtracted.
- **Sharing.** One ADC serves all 256 bit lines of a PE. The source says only
  that the ADCs and shift-and-add units are time-shared.
- **Scheduling and handshakes.** The loop order, the handshakes, the two-stage
  shift-and-add pipeline and the addressed configuration port are this design's.
- **Not included.** The tile and chip level (tile buffer, output buffer, neural
  function units, global bus) follow ISAAC and are not specified further. The
  top brings their connections out as ports (`in_vec`, `start`, `psum`). The
  trans-impedance amplifier is taken as unity gain.
- **Not in hardware.** The parameter search that picks N_R1, N_R2, M, Delta_R1
  and Bias per layer runs offline in software. This RTL only provides the
  registers it writes.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

- **`tb_trq_sar_logic`** covers the 3-bit example above, full-precision and
  ideal-case sweeps, a bias case and 3000 random configurations. Each code,
  operation count and latency is checked against an arithmetic model of the
  quantiser, with no binary search in the model.
- **`tb_trq_shift_add`** sends a random code stream and checks it against a
  modulo-2^16 reference. It also checks the 2-cycle latency and clear.
- **`tb_trq_pe_ctrl`** checks the tag and word-line sequence at full size and the
  cycle count.
- **`tb_trq_pim_pe`** runs end to end with all parameters at their defaults.
  - **Runs:** 9 MVMs in uniform 8-bit, uniform 4-bit and several twin-range
    configurations, on sparse and on dense data.
  - **Reference:** rebuilt from bit-line counts. The uniform 8-bit results must
    also equal the exact dot product.
  - **Counts:** the MVM cycle count and the A/D-operation count are checked.
  - **Mechanisms:** each of these is counted and must occur at least once: R1
    hits, R2 hits, bias, uniform mode, M-shift decoding, the negative crossbar,
    partial-sum wrap, above-full-scale trials, a dropped configuration write and
    an accumulated second row block.
  - **Run time:** about 25 s to build and under a second to run.

`tb_trq_adc_bound_sweep` repeats the evaluation's sweep of the ADC length bound
(8, 7, 6, 5 and 4 bits) on a synthetic skewed distribution. Actual network
activations are not part of this release. The sweep works as follows:

- It uses the ideal-case settings `N_R2 = B` and `M = 8 - B`.
- It picks N_R1 by minimising the operation count on calibration samples.
- It checks every code and operation count, and it checks that R1 is lossless.
- It prints the remaining share of A/D operations: about 55 % at B = 8, falling
  to 44 % at B = 4 on this data.

`tb_trq_cnn_slices` runs one layer of each evaluated network through the
full-size processing element. It covers LeNet-5 fc1 (400 inputs), a ResNet-20
3x3x64 convolution (576), a SqueezeNet1.1 3x3 expand layer over 64 squeeze
channels (576) and a ResNet-18 3x3x512 convolution (4608).

- Each run is one output position of 16 output channels. The layer sizes are
  real, and the weights and activations are generated.
- The inputs are split into 128-row blocks. The first block clears the partial
  sums, and every later block accumulates onto them.
- Uniform 8-bit results must equal the exact dot product modulo 2^16.
- The 4-bit ideal TRQ setting (`N_R2 = 4`, `M = 4`, `N_R1 = 3`) must match the
  quantiser reference. Cycle and operation counts are checked for every block.
- On this data TRQ uses about 51 % of the 8-bit A/D operations. The mean error
  is 2 to 3 % of the mean result.
- A whole network needs many processing elements and the chip around them,
  which this design does not contain.

Build and run any of them with plain Verilator. The package goes first on the command line, and `-y rtl`
finds the modules. For example:

```
verilator --binary --timing --assert -y rtl rtl/trq_pkg.sv \
          tb/tb_trq_pim_pe.sv --top-module tb_trq_pim_pe -Mdir obj
./obj/Vtb_trq_pim_pe
```

## Changing the design

- **Resolution.** `R_ADC` in `trq_pkg` sets the ADC resolution and the width of
  every configuration field.
- **Sizes.** The crossbar rows `S`, the input and weight bits `KI` and `KW`, the
  columns `NCOL` and the partial-sum width `PSUM_W` are parameters of
  `trq_pim_pe`.
- **Bit-line mapping.** To map weights to bit lines differently, change both
  `trq_pe_ctrl` (the tags) and the programming of the crossbar model.
