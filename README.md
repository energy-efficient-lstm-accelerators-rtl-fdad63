# An 8-bit LSTM inference accelerator for small FPGAs

This is synthesizable SystemVerilog for a complete LSTM model accelerator: one LSTM layer with one
cell, then a dense layer. It targets the smallest FPGAs, where DSP slices and block RAM run out
first, and it is built for energy per inference. Three choices shape it.

- **Everything is 8-bit fixed point.** An 8x8 multiplier is small enough to build from LUTs at
  about DSP speed. Each ALU can therefore be told to use a DSP slice or plain logic.
- **The sigmoid and tanh are replaced by piecewise-linear functions.** HardSigmoid\* and HardTanh
  are a few comparators and a shift. They need no 256-entry lookup table.
- **Every multiply-accumulate loop is a five-stage pipeline.** The slow multiplier gets a clock
  cycle of its own, which raises the clock frequency. Once the pipeline is full, one MAC
  completes per cycle.

All weights, biases, the cell state and the input sequence live on chip. A host loads them through
one write port, then starts an inference and reads `y`.

## The model it computes

The input is a sequence x_0 … x_{S-1}, each element holding `INPUT_SIZE` values. The LSTM cell is
applied once per element. Its state h (hidden, `HIDDEN_SIZE` values) and C (cell state) start at
zero:

```
i = HardSigmoid*(W_i [h, x_t] + b_i)      f = HardSigmoid*(W_f [h, x_t] + b_f)
g = HardTanh    (W_g [h, x_t] + b_g)      o = HardSigmoid*(W_o [h, x_t] + b_o)
C = f * C + i * g                          h = o * HardTanh(C)
```

`[h, x_t]` is the concatenation, of length `HIDDEN_SIZE + INPUT_SIZE`. After the last element, the
dense layer computes `y = W_d h + b_d`, giving `OUT_FEATURES` outputs with no activation.

## Number format and rounding

A number is a signed two's-complement word of `W` bits with `FRAC` fractional bits, written
(FRAC, W). The default is (4,8): one LSB is 1/16 and the range is [-8, 7.9375]. A product of two
such numbers is kept at full width, (8,16).

Rounding happens in exactly three places:

- at the end of each inner product;
- after `f*C + i*g`, which is added at full precision first;
- after `o*HardTanh(C)`.

Each time, half an LSB is added, the result is shifted right arithmetically (round half up), and it
is saturated to the W-bit range. The function is `lstm_pkg::round_sat`. The accumulator of an inner
product is wide enough never to overflow, so saturation only happens at the final rounding.

## The pipelined MAC ALU (`mac_alu`)

This is the core of the design. The cell uses four MAC ALUs and the dense layer one. Each computes
`round_sat(bias*2^FRAC + Σ a[j]*b[j])` over `len` elements:

| stage | work | where |
|---|---|---|
| S1 initialisation | `start` sampled; accumulator := bias·2^FRAC, index := 0 | ALU |
| S2 data loading | ALU drives `rd_en`, `idx`; a[idx], b[idx] are registered | the operand memories' read register |
| S3 multiplication | 8x8 → 16-bit product, registered | `fxp_mul` |
| S4 accumulation | product added to the wide accumulator | ALU |
| S5 rounding and output | round, saturate, register `out`, pulse `out_valid` | ALU |

Iteration j is in S2 while j-1 is in S3 and j-2 is in S4. An inner product of length `len`
therefore takes `len + 4` cycles, counting the S1 cycle. For eight elements that is 12 cycles;
from cycle 4 to cycle 9, three iterations are in flight.

The S2 register sits in the memories, not in the ALU. This lets a block RAM's own output register
serve as the load stage. As a result, every operand source must have exactly one cycle of read
latency. These are the weight memories (`param_mem`), the `[h, x]` operand register in the cell,
and the h read port that the dense layer uses.

`busy` falls in the same cycle that `out_valid` is high, so the next inner product can start in
that cycle.

The gate bias is loaded into the accumulator in S1, scaled to the product format. This way the
bias costs no extra cycle and no extra rounding step.

## One time step in the cell (`lstm_cell`)

The hidden units are processed one after another, and the four gates of a unit are processed in
parallel. For unit k:

1. **Bias prefetch (1 cycle).** The four bias memories are read at address k.
2. **Gate ALUs (`HIDDEN+INPUT+4` cycles).** The four ALUs run in lock step over j. Each reads row k
   of its own weight matrix, at address `k*(HIDDEN+INPUT) + j`. All four share the operand
   `[h_{t-1}, x_t][j]`, which is registered once.
3. **Activation (combinational).** The four results go through `activation_unit` in the cycle they
   appear: HardSigmoid\* on i, f and o, HardTanh on g.
4. **State update (4-stage pipeline, `state_update`).** Three multipliers compute f·C[k] and i·g,
   then the sum C_t[k]. C_t goes back to the activation unit for HardTanh, and the third
   multiplier forms h_t[k]. The results are written back four cycles later.

The gate ALUs move on to unit k+1 as soon as unit k's pre-activations leave. The state update of
unit k therefore overlaps the next unit's MACs, and each unit costs `HIDDEN+INPUT+6` cycles.

h is double-buffered. Every unit of step t needs all of h_{t-1}, so h_t is written into the second
bank, and the banks swap when the step ends. C needs no second bank, because C[k] is read and
written only by unit k. `clear` zeroes both banks and C, which sets h_0 = C_0 = 0.

## Activation functions

**HardTanh** (`hard_tanh`) clamps its input to [`MIN_VAL`, `MAX_VAL`]. The default is ±1.0. It is
two comparators and a multiplexer, and it loses no precision.

**HardSigmoid\*** (`hard_sigmoid`) has a slope of 1/8 instead of PyTorch's 1/6, because 1/8 is a
shift:

```
y = 0                 x < -3
y = 1                 x >= 3
y = (x >>> 3) + 0.5   otherwise
```

In (4,8) the linear range holds 96 input codes and yields 12 distinct outputs. Adding the two
constant levels gives 14. Three implementations give bit-identical results, chosen by `METHOD`:

| METHOD | structure | suits |
|---|---|---|
| `HS_ARITH` | range comparators, shift, add | wide formats, fewest LUTs |
| `HS_1TO1` | table with one entry per linear-range input (96 for (4,8)) | 6 or more fractional bits |
| `HS_STEP` | one comparator per output level, so equal outputs merge (14 for (4,8)) | (4,8), the default |

Both tables are computed at elaboration from the formula, so they work for any (FRAC, W). In
(6,8) and (8,10) the ±3 limits lie outside the representable range. The function is then linear
over the whole range.

## Layer and network control

- **`lstm_layer`** clears the cell and runs one step per sequence element, t = 0 … `seq_len`-1.
  It shows the current element index on `t_idx`, so the surrounding logic can present x_t.
- **`dense_layer`** computes the outputs one after another on its single ALU. It reads h_t from
  the cell's h port and starts each output with a bias prefetch.
- **`lstm_accel`** is the top level. It holds the input buffer (`SEQ_MAX` elements) and sequences
  its steps: LSTM layer, then dense layer, then a `done` pulse. `y` holds its value until the next
  inference.

## Host interface and memory map

Loading is done only while `busy` is low: raise `wr_en` for one cycle with `wr_sel`, `wr_addr` and
`wr_data`. `wr_sel` takes values of `lstm_pkg::param_sel_e`:

| wr_sel | memory | address |
|---|---|---|
| `SEL_WI`, `SEL_WF`, `SEL_WG`, `SEL_WO` | gate weights | `k*(HIDDEN_SIZE+INPUT_SIZE) + j`, where j < HIDDEN_SIZE selects h[j] and larger j selects x[j-HIDDEN_SIZE] |
| `SEL_BI`, `SEL_BF`, `SEL_BG`, `SEL_BO` | gate biases | `k` |
| `SEL_DW` | dense weights | `p*IN_FEATURES + j` |
| `SEL_DB` | dense biases | `p` |
| `SEL_X` | input sequence | `t*INPUT_SIZE + m` |

To run an inference, pulse `start` with `seq_len` (1 … `SEQ_MAX`), then wait for `done`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `HIDDEN_SIZE` | 20 | hidden units (intended range 1–200) |
| `INPUT_SIZE` | 1 | values per input element (intended range 1–10) |
| `IN_FEATURES` | 20 | dense-layer inputs; must equal `HIDDEN_SIZE` |
| `OUT_FEATURES` | 1 | dense-layer outputs |
| `SEQ_MAX` | 16 | capacity of the input buffer |
| `W`, `FRAC` | 8, 4 | fixed-point format |
| `LSTM_ALU_RES`, `DENSE_ALU_RES` | `ALU_DSP` | DSP or LUT multipliers for the seven cell ALUs and the dense ALU; emitted as a `use_dsp` attribute |
| `W_RES` | `MEM_AUTO` | `MEM_LUTRAM`, `MEM_BRAM` or `MEM_AUTO` for the parameter memories; emitted as a `ram_style` attribute |
| `HS_METHOD` | `HS_STEP` | HardSigmoid\* implementation |
| `HT_MAX`, `HT_MIN` | 16, -16 | HardTanh thresholds as raw codes (±1.0) |

At the defaults, the design uses eight multipliers: four gate ALUs, three state-update
multipliers and one dense ALU. With `ALU_DSP` these are eight DSP slices.

## Timing

Each count below is the number of clock edges from the edge that samples `start` to the edge that
raises `done` (K = `HIDDEN_SIZE`, M = `INPUT_SIZE`, P = `OUT_FEATURES`):

| unit | clock edges |
|---|---|
| one MAC of length n | n + 3 (`out_valid` in cycle n + 5, counting the `start` cycle as 1) |
| one cell step | K·(K+M+6) + 4 |
| LSTM layer | S·(K·(K+M+6) + 6) |
| dense layer | P·(K+6) |
| whole inference | S·(K·(K+M+6) + 6) + P·(K+6) + 3 |

The testbenches check each of these. At the defaults, one element costs 546 cycles. With S = 10,
an inference takes 5,489 cycles, or 26.9 µs at 204 MHz. This is close to the 28.07 µs published for
this architecture at that clock. The sequence length behind that figure is not stated, so the two
numbers cannot be matched exactly.

## Departures and own choices

These points either differ from the architecture as published or fill gaps where it is silent:

- **Number of state-update ALUs.** The published text mentions two pipelined ALU instances, but
  its block diagram shows four gate ALUs, three state-update ALUs and one dense ALU, and it reports
  eight DSPs. The 4 + 3 + 1 structure is built.
- **Boundary of HardSigmoid\*.** x = -3 maps to 1/8, not 0. This is what makes the 1to1 table hold
  exactly 96 entries.
- **Own choices where the architecture is silent:**
  - where the bias enters the ALU;
  - the rounding mode and the accumulator width;
  - the bias prefetch cycle;
  - the overlap between units and the double-buffered h;
  - the synchronous active-low reset, which clears control state but not memories;
  - the host write port, the input buffer and the run-time sequence length;
  - per-gate activation instances;
  - reading "a dense layer with 20 neurons" as 20 inputs and 1 output.
- **Not built.** This covers multiple LSTM layers or cells and the non-pipelined ALU variant. DSP
  slices cannot be assigned ALU by ALU, for example only to the ALUs on the critical path; the
  resource choice is made per layer. The
  Spartan-7 resources, timing closure and power are outside the RTL. Synthesis attributes only
  hint at DSP or RAM mapping.

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `lstm_pkg` | types, enums, `round_sat` |
| `fxp_mul` | registered multiplier |
| `mac_alu` | pipelined MAC |
| `hard_sigmoid`, `hard_tanh`, `activation_unit` | activation functions |
| `param_mem` | parameter memories |
| `state_update` | cell and hidden state update |
| `lstm_cell` | one time step |
| `lstm_layer` | sequence loop |
| `dense_layer` | output layer |
| `lstm_accel` | top level |

Every file opens with a comment on its interface and timing.

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. `lstm_ref_pkg.sv` holds the
integer reference model they share. There are also two extra system tests:

- `tb_lstm_accel_variants` runs three instances with different activation, ALU and memory options
  and requires identical outputs.
- `tb_lstm_accel_h200` runs a model with 200 hidden units and 10 inputs.

`tb_lstm_accel` runs the top at its default parameters. It also counts how often the clipping and
saturation paths and the state clear are exercised. Each testbench prints
`TB_RESULT checks=N failures=M`.

To simulate with Verilator 5, run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/lstm_pkg.sv tb/lstm_ref_pkg.sv tb/tb_lstm_accel.sv --top-module tb_lstm_accel
./obj_dir/Vtb_lstm_accel
```

Replace `tb_lstm_accel` with any other testbench name. To check that a testbench does not depend on
initial register values, add `+verilator+rand+reset+2` to the run.
