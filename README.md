# A systolic, DSP-slice-shaped symmetric FIR filter

A long linear-phase FIR filter has a symmetric impulse response,
h[N-1-j] = h[j]. For each of the N/2 distinct coefficients you can therefore
add the two samples that share it first, then multiply once. FPGA DSP slices
offer exactly this operation: a pre-adder, a multiplier and a post-adder with
a dedicated cascade route to the next slice. This RTL builds the filter as one
pipelined chain of N/2 such elements. The running sum flows from element to
element and is registered in each one, so no element ever waits on a wide
adder tree. The default is a 180-tap filter on 90 elements.

Two additions make very long filters practical:

* **Breaks.** Extra registers can be placed on the running sum between
  elements. The sample taps are delayed to match, so the filter function is
  unchanged and only the latency grows. A break cuts the dedicated cascade
  route. The chain can then cross from one DSP column to the next, and the
  long route between columns gets a register of its own.
* **Normalising shifts.** Small coefficients can be stored with their
  redundant sign bits removed ("bit compression"). This gives them more
  significant bits in the same 18-bit multiplier. To put every product back
  on a common scale, the two samples entering that element are shifted left,
  not the running sum. The DSP cascade therefore stays untouched, and with
  constant shifts the cost is only wiring.

The structure, the delay bookkeeping, the break rule, the shifts and the
default widths follow the published design this RTL implements
(P. Födisch et al., "Implementing High-Order FIR Filters in FPGAs"). Resets,
port shapes, the way break positions are specified and a few bounds are this
implementation's own. They are listed under "Departures and choices" below.

## What the chain computes

Let K = N/2 and number the elements k = 0 .. K-1 from the input end. Element
k holds coefficient h[K-1-k]:

```
            pre-adder                 multiplier   post-adder + register
 P_k <= ( x[n - b_k] + x[n - 1 - 2k - b_k] ) * h[K-1-k]  +  F_k
 F_0  = 0
 F_k  = P_{k-1} delayed by the break registers between k-1 and k (if any)
 y    = P_{K-1}
```

Here b_k is the number of break registers in front of element k. Element 0
pairs the newest sample with the one 1 clock older. Each further element
reaches 2 clocks further back, because its product also arrives 1 clock later
through the running-sum register. Unrolling gives the ordinary symmetric FIR,
delayed by L clocks:

```
y[n] = sum_{j=0}^{K-1} h[j] * ( x[n-L+1-j] + x[n-L+1-(N-1)+j] )       (y read after clock edge n)
L    = 1 + b_{K-1}
```

The first element holds the centre coefficient and the last element holds
h[0]. A new sample therefore reaches the output through the last element
after only L clocks. This is the "reduced initial delay" form: the oldest
samples come from the end of the tap line, not the newest ones.

The samples travel on two lines (`sample_delay_line`):

* the **upper line**: one register, then two registers per element. Its taps
  are 1, 3, 5, ... clocks old. Every break adds registers here too.
* the **lower line**: the newest sample, broadcast to every element. It is
  delayed only at breaks, so that element k receives it b_k clocks late.

| quantity (defaults: N = 180, full z^-1 break) | value |
|---|---|
| elements (DSP slices) | 90 |
| break registers on the running sum | 89 x 36 bit |
| latency L (h[0] term) | 90 clocks |
| centre-tap term h[89] | 179 clocks |
| throughput | one sample per clock |

## Breaks: layouts and their cost

A break sits in front of element k (k >= 1) when `k % BREAK_EVERY == 0`, or
when bit k of `BREAK_MASK` is set. Each break is `BREAK_DEPTH` registers
deep. The published evaluation compares four layouts on a 90-slice Xilinx
Artix-7 and a Cyclone V:

| layout | parameters | latency at N = 180 |
|---|---|---|
| straightforward (no break) | `BREAK_EVERY=0` | 1 |
| partial break at DSP-column boundaries | `BREAK_EVERY=<column length>` or `BREAK_MASK` | 1 + number of columns - 1 |
| full break z^-1 (default) | `BREAK_EVERY=1, BREAK_DEPTH=1` | 90 |
| full break z^-2 | `BREAK_EVERY=1, BREAK_DEPTH=2` | 179 |

The published results, quoted here for orientation:

* The full z^-1 break used the least fabric logic on both FPGA families:
  188 ALMs on the Cyclone V, and under 0.5 % of the LUTs on the Artix-7.
* The full z^-2 break reached the highest clock: 526 MHz on the Artix-7 and
  232 MHz on the Cyclone V.
* Without breaks, the Artix-7 reached 238 MHz.

Those numbers come from vendor tools mapping onto hard DSP slices. This RTL
has not been put through such a flow.

Every break register on the running sum is matched by a register on both
sample lines in front of the same element. If you edit the structure, keep
the two in step: `fir_pkg::break_regs_before` is the single place where b_k is
computed, and both `sample_delay_line` and `fir_systolic` use it.

The lower sample line holds the same delays as the start of the upper line.
A synthesis tool may merge the two. In a generic (non-vendor) synthesis,
the default configuration comes to about 10,460 flip-flop bits: 90 x 36 for
the element registers, 89 x 36 for the breaks and 268 x 15 for the upper
line.

## Coefficients, bit compression and shifts

Plain quantisation stores `I_j = round(h[j] * 2^(b-1))` for b-bit
coefficients. A low-pass has a few large central taps and many tiny outer
taps, and the tiny ones keep only a few significant bits. Bit compression
stores instead

```
Q_j  = floor(-log2 |h[j]|)                 (redundant sign bits of h[j]), limited to 0 .. Qmax
I_j  = round(h[j] * 2^(b-1+Q_j))           (uses the whole b-bit word)
d_j  = Qmax - Q_j                          (the element's left shift, parameter SHIFT[j])
```

so every product `I_j * 2^d_j * (x1 + x2)` has the common scale
2^(b-1+Qmax). The filter output is then the plain output scaled by 2^Qmax.
The shifts are applied to both samples before the pre-adder. This makes the
pre-adder the limit: the shifted sum must fit in W_C bits, so

```
Qmax <= W_C - W_X - 1        (fir_pkg::max_shift)
```

With 16-bit samples and a 25-bit pre-adder (the DSP48E1 case) this gives 8.
With the default 15-bit samples and 16-bit pre-adder it is 0, so the default
configuration has no room for shifts. To use them, instantiate the filter
with the wider pre-adder, for example
`#(.W_X(16), .W_C(25), .W_E(43), .W_F(48), .SHIFT(...))`. The running sum must
also have room for the extra 2^Qmax.

`Q`, `I` and `d` are computed off-line from the real-valued design. The
testbench package `tb_fir_util_pkg` contains the formulas, usable at
elaboration (`compress_q`, `quant_compressed`). `tb_fir_response` shows the
effect on a 180-tap Nuttall-window low-pass (cut-off 0.11 fs), measured from
the simulated impulse responses:

| coefficients | worst stopband level (f >= 0.14 fs) |
|---|---|
| unquantised | -111.9 dB |
| plain 18-bit | -81.5 dB |
| bit-compressed 18-bit + shifts (Qmax = 8) | -107.3 dB |

## Interface

`fir_systolic` (top):

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | one sample per rising edge |
| `rst` | in | 1 | synchronous, active high; clears every register |
| `x` | in | `W_X` signed | input sample |
| `coef` | in | `N_TAPS/2` x `W_D` | `coef[j]` = h[j], two's complement; hold constant while filtering |
| `y` | out | `W_F` signed | output, registered, wraps modulo 2^W_F |

| parameter | default | meaning |
|---|---|---|
| `N_TAPS` | 180 | even number of taps; N/2 elements |
| `W_X` | 15 | sample width (pre-adder inputs A and B) |
| `W_C` | 16 | pre-adder width |
| `W_D` | 18 | coefficient width |
| `W_E` | 34 | product width |
| `W_F` | 36 | running-sum and output width |
| `BREAK_EVERY` | 1 | period of breaks (0: none) |
| `BREAK_DEPTH` | 1 | registers per break |
| `BREAK_MASK` | 0 | extra break positions, bit k = in front of element k |
| `SHIFT` | all 0 | `SHIFT[j]`: left shift d_j of the element holding h[j] |

Reset clears every register, which is the same as a history of zero
samples. From then on the output is the exact filter response to the
samples entered since reset, L clocks late. A change of `coef` affects products formed
from then on, so the output shows a mix of old and new coefficients for
about N/2 + L clocks.

## Files

| file | contents |
|---|---|
| `rtl/fir_pkg.sv` | defaults, break-layout functions (b_k, latency), shift bound |
| `rtl/dsp_block.sv` | one element: shifts, pre-adder, multiplier, post-adder, register |
| `rtl/sample_delay_line.sv` | upper and lower sample lines, per-element taps |
| `rtl/sum_break.sv` | a break of `DEPTH` registers on the running sum |
| `rtl/fir_systolic.sv` | the filter |
| `tb/tb_fir_util_pkg.sv` | window-method low-pass design, quantisation, bit compression |
| `tb/tb_dsp_block.sv`, `tb/tb_sample_delay_line.sv`, `tb/tb_sum_break.sv` | unit tests |
| `tb/tb_fir_systolic.sv` | 20-tap filter in six layouts, against a direct-form model |
| `tb/tb_fir_full.sv` | default 180-tap filter, impulse response and 3000 samples |
| `tb/tb_fir_layouts.sv` | the four break layouts at 180 taps, same filter, different latency |
| `tb/tb_fir_response.sv` | frequency response: plain against bit-compressed coefficients |

## Simulating

Each testbench checks itself. It prints `TB_RESULT checks=N failures=M` and
stops, and a watchdog ends a hung run. With Verilator 5:

```
verilator --binary --timing -y rtl -y tb rtl/fir_pkg.sv tb/tb_fir_util_pkg.sv \
          tb/tb_fir_systolic.sv --top-module tb_fir_systolic
./obj_dir/Vtb_fir_systolic
```

Replace the testbench name to run the others. Each one finishes in well under
a second of simulation time. What they check:

* **The unit tests.** Each compares the block with arithmetic done in the
  testbench, including full-scale and wrapping operands. `tb_dsp_block` also
  checks the shifted element.
* **`tb_fir_systolic`.** It runs six break and shift layouts side by side.
  Each output is checked against a direct-form convolution every clock. Each
  layout's latency is checked on an impulse, and the testbench confirms that
  the shifts change the result.
* **`tb_fir_full`.** It checks the default filter tap by tap on an impulse,
  then checks the running sum against the convolution on random and
  full-scale input. The largest output seen is 2^31.2, inside the 36-bit
  running sum.
* **`tb_fir_layouts`.** It runs the four published break layouts at full size
  on the same input. All four must give the direct-form result, each at its
  own latency. The partial break uses a period of 30 elements as a stand-in
  for a DSP-column length.

## Departures and choices

* **Sizes.** The source describes the example as both "90 taps" and "180
  taps, order 179, on 90 DSP blocks". Here N = 180 taps on 90 elements.
* **Output register.** The source's block diagrams take the output straight
  from the last post-adder. Here it is the last element's register, which
  adds one clock of latency. No other DSP-internal pipeline registers (input,
  multiplier) are modelled. A vendor mapping may add them, which raises every
  path by the same number of clocks.
* **Shift bound.** The source quotes a shift limit of 9 bits for 16-bit
  samples and a 25-bit pre-adder. At 9, two full-scale samples of equal sign
  overflow the pre-adder. This RTL enforces one bit less, and an elaboration
  error rejects a larger `SHIFT`.
* **Overflow.** No saturation or overflow flag. The widths must be chosen
  for the coefficients, as in the source.
* **Break positions.** The source allows a break at any position. Here a
  position is given by a period and/or a mask (up to 1024 elements). Breaks
  in front of element 1 are allowed.
* **Coefficients.** They are a port, not constants. A synthesis tool folds
  them when they are tied off. The shifts are parameters because they must
  be wiring.
* **Reset.** Reset and the packed array ports are choices of this RTL. The
  source says nothing about them.
* **Not built:**
  * filters with an odd number of taps, or with point (anti-)symmetry, which
    the source says follow by analogy;
  * the off-line coefficient computation, whose formulas are in the
    testbench package;
  * the mapping onto vendor DSP primitives.
