# TYTAN activation engine in SystemVerilog

Neural-network accelerators are good at multiply-accumulate and poor at the
non-linear functions between layers: sigmoid, tanh, GELU, Swish, SELU,
Softplus. This design computes all of them with one small engine. Its core,
TYTAN, does nothing but evaluate a polynomial,

    T(x) = c0 + x*(c1 + x*(c2 + ... + x*c[n-1]))

by Horner's rule on one FP32 multiplier and one FP32 adder. The coefficients
are loaded at run time, so the same core produces a truncated Taylor series of
e^x, of log(1+u), or of anything else. A few fixed operations around the core
(a scale before it; +1, -1, a multiply or a divide after it) turn the
polynomial into the activation. The number of coefficients n is the only knob
for accuracy, and the only thing that sets latency: an element takes
3 + 24n cycles in the core, whatever the function.

The design follows the paper "TYTAN: Taylor-series based Non-Linear Activation
Engine for Deep Learning Accelerators" (Pramanik et al.). The RTL here is an
independent implementation from that paper's description. Where the paper is
silent, the choices are this design's own; they are listed in
[Where this design departs from the paper](#where-this-design-departs-from-the-paper).

## How activations map onto the polynomial

With core A loaded with the series of e^x (entry i = 1/(n-1-i)!), the modes
compute:

| mode            | before the core | after the core                         | result with T = e^x series |
|-----------------|-----------------|----------------------------------------|----------------------------|
| `MODE_POLY`     | -               | -                                      | e^x                        |
| `MODE_SIGMOID`  | -               | T / (T + 1)                            | sigmoid(x)                 |
| `MODE_TANH`     | x * 2           | (T - 1) / (T + 1)                      | tanh(x)                    |
| `MODE_SELU`     | -               | x < 0 ? lambda*alpha*(T - 1) : lambda*x | SELU(x)                    |
| `MODE_SWISH`    | -               | x * T                                  | x * (series in core A)     |
| `MODE_GELU`     | x * 1.702       | x * T                                  | x * (series at 1.702x)     |
| `MODE_SOFTPLUS` | -               | core B: T_b(T_a(x))                    | log(1 + e^x) with B = log(1+u) series |

Swish and GELU multiply x by the core's output. For them to be x*sigmoid(x)
and x*sigmoid(1.702x), core A must hold a series of sigmoid, not of e^x.
The hardware does not care what the coefficients mean. Softplus chains the two
cores: A evaluates e^x and B evaluates log(1+u) at u = A's result. The
log(1+u) series converges only for u < 1, that is for x < 0. Any other
polynomial can be run in `MODE_POLY`.

SELU uses lambda = 1.0507009873554805 and alpha = 1.6732632423543772. The
multiplexer takes the polynomial branch when the input is below zero.

## Datapath of the engine (`gnae_top`)

    in_data ─► input buffer ─► pre-scale ─► core A ─┬──────────► post add-ons ─► output buffer ─► out_data
               (30 x FP32)     (x2, x1.702,          │            (+1, -1, mul,     (30 x FP32)
                                x1)                  └► core B ─┘  div, mux)
                                                     (Softplus only)

Every stage holds one element and passes it on with a valid/ready handshake.
An element carries the original input x, the working value v and a `last`
flag (`elem_t` in `tytan_pkg`). x travels with the element because Swish, GELU
and SELU need it after the core. Because the stages overlap, the add-ons work
on neighbouring elements while the core works. The core is by far the slowest
stage and sets the rate.

Back-pressure works the usual way. A full input buffer drops `in_ready`. A
reader that stops taking results fills the output buffer. After that, the post
stage, the cores and the pre-scale stall in turn.

## The TYTAN core (`tytan_core`)

The core holds four registers and two FP32 units:

- `rf_x`: the input element.
- `rf_c`: the current coefficient.
- `acc`: the accumulator.
- `add_a`/`add_b`: the adder operands.
- The multiplier forms `acc * x`.
- The adder forms `product + coefficient`.

The adder's result becomes the new `acc`. The accumulator starts at zero, so
the first step gives `0*x + c[n-1] = c[n-1]`. After n steps `acc` = T(x).

A ten-state machine does the sequencing:

| state      | does                                          | next                                     |
|------------|-----------------------------------------------|------------------------------------------|
| `IDLE`     | waits for an element and for coefficients      | `INIT`                                   |
| `INIT`     | acc = 0, term index = 0                        | `FETCH`                                  |
| `FETCH`    | takes an element (in_ready high)               | `LOAD` once an element is there          |
| `LOAD`     | rf_c = next coefficient, index++               | `CHECK`                                  |
| `CHECK`    | after LOAD: go multiply. After an add: acc = sum; more terms? | `COMPUTE` / `LOAD` / `SAVE` |
| `COMPUTE`  | starts acc*x                                   | `WAIT_MUL`                               |
| `WAIT_MUL` | MUL_LAT cycles                                 | `ADD`                                    |
| `ADD`      | adder operands = product, coefficient          | `WAIT_ADD`                               |
| `WAIT_ADD` | ADD_LAT cycles                                 | `CHECK`                                  |
| `SAVE`     | offers the result (out_valid)                  | `INIT`, or `IDLE` if the element was last |

The state names and the transitions between them follow the paper's state
diagram. What triggers the transitions the diagram leaves unlabelled is this
design's choice. So is using the `last` flag to return to IDLE.

The coefficient buffer (`coef_buffer`) is written by appending. The first word
written is entry 0, and the core reads entries 0 to n-1 for every element.
Write the **highest-order coefficient first**: entry 0 = c[n-1],
last entry = c0. The number of words written is n; `coef_clear` empties the
buffer.

## Timing

Assume elements are always available and results are taken at once. With
n coefficients, one element spends this many cycles in the core, from INIT to
SAVE:

    3 + n * (5 + MUL_LAT + ADD_LAT)       = 3 + 24n at the defaults (723 for n = 30)

That is 5 control cycles per Horner step, plus the waits for the two units.
The add-ons add their own latencies. The counts below are measured on the
design at default parameters, from an element leaving the input buffer to its
result entering the output buffer:

| activation       | pre-scale | core            | post    | total at n = 30 |
|------------------|-----------|-----------------|---------|-----------------|
| tanh, sigmoid    | 11        | 723             | 13      | 747             |
| SELU             | 11        | 723             | 20      | 754             |
| Swish, GELU      | 11        | 723             | 11      | 745             |
| POLY             | 11        | 723             | 1       | 735             |
| Softplus         | 11        | 723 + 1 + 723   | 0       | 1458            |

Pre-scale is the cycle that takes the element plus MUL_LAT; post is the cycle that takes the result plus the add-on's unit latencies (ADD_LAT + DIV_LAT, ADD_LAT + MUL_LAT or MUL_LAT). In Softplus, core B starts one cycle after core A's result is ready. A batch of 30 tanh elements
takes 747 + 29 x 723 = 21,714 cycles from the first read to the last result.
Filling the input buffer takes one cycle per value.

The paper reports 747 cycles per tanh element with 30 coefficients. The
default latencies (multiplier 10, adder 9, divider 3 cycles) were chosen to
reproduce that figure; the paper does not give per-unit latencies. Two other
figures of the paper are not reproduced. It gives 22,474 cycles for 30
elements, which suggests no overlap between elements. It also gives 120 cycles
to fill the buffer with 30 values, i.e. 4 cycles per value. Its clock-rate,
area and power figures (950 MHz, 0.028 to 0.037 mm² in a 45 nm library) are
properties of its synthesis run. This RTL has not been timed or synthesized
against them.

## Number format

Everything is IEEE-754 single precision:

- Rounding is to nearest, ties to even.
- Subnormal inputs count as zero, and results below the normal range flush to
  a signed zero.
- Overflow gives infinity.
- Invalid operations give the quiet NaN 0x7FC00000.

The three units (`fp32_mul`, `fp32_add`, `fp32_div`) are combinational
functions followed by a parameterised number of pipeline registers. Their
latency parameter is therefore a pipeline depth, and the synthesis tool is
expected to retime the logic into it. The engine's sequencing only needs the
result to be ready LATENCY cycles after the operands, which then stay put.

## Interface of `gnae_top`

| port                                   | dir | width | use |
|----------------------------------------|-----|-------|-----|
| `clk`, `rst_n`                         | in  | 1     | clock; synchronous active-low reset of all control state |
| `mode`                                 | in  | 3     | `mode_t`, change only while `busy` is low |
| `coef_sel`                             | in  | 1     | 0 = core A, 1 = core B |
| `coef_clear`, `coef_wr_en`, `coef_wr_data` | in | 1,1,32 | empty / append one coefficient; only while idle |
| `n_terms_a`, `n_terms_b`               | out | 5     | coefficients loaded in each core |
| `in_valid`, `in_ready`, `in_data`, `in_last` | | 1,1,32,1 | input elements; `in_last` marks the end of a batch |
| `out_valid`, `out_ready`, `out_data`, `out_last` | | 1,1,32,1 | results, in input order |
| `in_count`, `out_count`                | out | 5     | buffer fill levels |
| `busy`                                 | out | 1     | elements between the two buffers |

Parameters: `BUF_DEPTH` (30), `N_MAX` (30 coefficients per core), `MUL_LAT`
(10), `ADD_LAT` (9), `DIV_LAT` (3). The buffer and coefficient depths are the
30 values and 30 coefficients of the paper's latency measurement. The
largest term count the paper's layer-wise search ends up with is 25.

`WITH_ADDONS` (default 1) chooses between the two sizes the paper reports
area and power for. With 1 you get the full engine described above. With 0
you get the bare accelerator: input buffer, core A, output buffer. That
version has no pre-scale, no core B and no post stage, so it only evaluates
the loaded polynomial (`mode` must stay `MODE_POLY`, `coef_sel` at 0, and
`n_terms_b` reads 0). Its results leave the core straight into the output
buffer. An element that is waiting in the input buffer enters the output
buffer 3 + 24n - 2 cycles after it leaves (721 for n = 30), because the
core's IDLE and INIT cycles overlap the wait; each further element of a batch
adds 3 + 24n.

A typical use looks like this:

1. Reset.
2. Load core A (and core B for Softplus).
3. Set `mode`.
4. Stream the elements, with `in_last` on the final one.
5. Collect the same number of results.

Assertions check that the mode and coefficients stay put while elements are in
flight, that no coefficient is written into a full buffer, and that every
offered word is held until it is taken.

## Where this design departs from the paper

- **Core wiring.** The paper's block diagram feeds the input into the adder and
  the coefficient into the multiplier. Its text and its nested-multiplication
  formula do the opposite (`acc*x + c`). The text is followed.
- **SELU.** The figure scales the core's input by lambda*alpha. The equation
  scales the core's output and subtracts 1. Here the design computes
  lambda*alpha*(T - 1), which is SELU when T is the e^x series, so SELU's
  input is not pre-scaled.
- **Softplus order.** The figure puts the log core first; the equation puts
  e^x first. Both cores are programmable, so the order is a matter of which
  coefficients go where. The tests use e^x then log(1+u).
- **Shared add-on hardware.** The paper draws a separate add-on network per
  mode. One set of units (two adders, one multiplier, one divider) serves all
  modes here.
- **Overlap and port rate.** Stages run concurrently. The input port takes one
  value per cycle. See [Timing](#timing) for the cycle counts this changes.
- **Precision.** The paper calls its precision "FP32 (configurable)". Only
  FP32 is built; the format is not a parameter.
- **Rounding and special values.** These are not specified in the paper. The
  choices are those in [Number format](#number-format).
- **Output buffer.** It is this design's reading of the paper's top-level
  diagram, which shows results going back into a buffer.
- **The software half** of the paper's co-design is not part of this RTL. That
  half searches, per network layer, for the smallest number of Taylor terms
  that keeps accuracy within budget. Its only contact with the hardware is the
  coefficient port.

## Verification

Each module has a self-checking testbench in `tb/`. Every one prints
`TB_RESULT checks=N failures=M` and stops with a watchdog if it hangs.
Reference results come from `tb_fp_pkg`. It computes each operation in double
precision and rounds once to FP32, which gives the correctly rounded FP32
result for + - * /. The checks are therefore bit-exact, not
tolerance-based.

| testbench          | covers |
|--------------------|--------|
| `fp32_mul_tb`, `fp32_add_tb`, `fp32_div_tb` | directed cases (signed zero, ties, cancellation, inf, NaN, overflow, flush) and 3,000 random pairs each; pipeline depth |
| `tytan_fifo_tb`    | random push/pop against a queue model; full and empty; depth 30 |
| `coef_buffer_tb`   | write/read back of 1 to 30 coefficients, dropped 31st write, clear |
| `tytan_core_tb`    | Horner results bit-exact for e^x series of 30, 10 and 1 terms and random coefficients; exp(x) within 0.1 %; latency 1 + 24n from FETCH to SAVE; output stall; return to IDLE |
| `tytan_prescale_tb`, `tytan_post_tb` | every mode, bit-exact; latency of each mode; both SELU branches |
| `gnae_top_tb`      | the whole engine at its default parameters: all seven modes, bit-exact and against the real activation; tanh latency 747 and batch time; input-buffer-full and output-buffer-full stalls; mode switches; core B chaining; reprogramming with 10 terms |
| `tytan_base_tb`    | the bare accelerator (`WITH_ADDONS = 0`), other parameters at default: 30-term e^x series bit-exact and within 0.1 %; latency 721 and batch time of 30; both buffers full |
| `activation_sweep_tb` | every mode with 10, 20 and 30 terms at 21 points in [-5, 5], bit-exact; prints the largest error against the exact function |
| `mobilevit_swish_tb` | Swish layer after layer with the term counts of the paper's MobileViT study (7 to 25), sigmoid-series coefficients computed in the testbench |

What the truncation costs, from `activation_sweep_tb` (largest absolute
error against the exact function, FP32 results):

| function | 10 terms, \|x\| <= 1 | 30 terms, \|x\| <= 1 | 30 terms, [-5, 5] |
|----------|------------------|------------------|-------------------|
| e^x (POLY) | 3.2e-7 | 8.3e-8 | 1.2e-5 |
| sigmoid  | 1.7e-7 | 2.1e-8 | 1.1e-6 |
| tanh     | 3.7e-4 | 1.4e-7 | 5.7e-3 |
| SELU     | 4.9e-7 | 3.5e-8 | 1.9e-6 |
| Swish    | 2.0e-6 | 1.9e-8 | 1.6e6 |
| GELU     | 5.8e-4 | 1.5e-8 | 1.0e13 |

Sigmoid, tanh and SELU are built on the e^x series, which converges
everywhere, so more terms always help. Swish and GELU use the series of
sigmoid itself, which only converges for |x| < pi (|x| < pi/1.702 for GELU);
outside that, more terms make the result worse. Softplus uses a log(1+u)
series on u = e^x, which converges only for u < 1, that is x < 0. For x <= -0.5
and 30 terms its error is 1.1e-6. For positive x it overflows. A user who
needs these functions over a wide range must pick the coefficients for that
range. A least-squares fit instead of a Taylor series loads through the same
port and needs no change to the hardware.

To run one with Verilator, for example the full engine:

    verilator --binary --timing --assert -Wall -Wno-fatal --top-module gnae_top_tb \
      -y rtl rtl/tytan_pkg.sv tb/tb_fp_pkg.sv tb/gnae_top_tb.sv
    ./obj_dir/Vgnae_top_tb

For a block testbench, replace the top module and testbench file. The package
files go first.

## Files

| file | contents |
|------|----------|
| `rtl/tytan_pkg.sv` | FP32 type, `mode_t`, `elem_t`, constants |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`, `rtl/fp32_div.sv` | pipelined FP32 units |
| `rtl/tytan_fifo.sv` | input and output buffer |
| `rtl/coef_buffer.sv` | coefficient buffer |
| `rtl/tytan_core.sv` | TYTAN core and its state machine |
| `rtl/tytan_prescale.sv`, `rtl/tytan_post.sv` | add-ons before and after the core |
| `rtl/gnae_top.sv` | the engine |
| `tb/tb_fp_pkg.sv` | reference arithmetic, Horner reference, series coefficients |
| `tb/*_tb.sv` | testbenches |
