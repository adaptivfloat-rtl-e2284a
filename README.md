# HFINT: an AdaptivFloat accelerator for sequence-to-sequence inference

Recurrent and attention networks often have wide weight distributions. A
Transformer can have weights more than ten times larger than those of a typical
CNN, and at 4–8 bits a uniform integer grid spends most of its codes on that
range. **AdaptivFloat** is a small floating-point format with one extra
parameter per tensor, an exponent bias. The bias slides the format's narrow
exponent range onto the tensor's actual range. The format has no denormals, and
its smallest-magnitude code is used for zero.

The hardware in this repository computes directly on AdaptivFloat data. It is a
**hybrid float-integer (HFINT)** design:

- Products are formed in floating point: the exponents are added and the
  mantissas multiplied.
- Each product is turned into an exact integer by a left shift.
- Products are summed in an ordinary integer accumulator.
- The per-tensor exponent biases are applied once, at the end, as a right shift.

So the "adaptive" part of the quantisation costs a shifter. An integer design
would need a high-precision rescaling multiplier.

The RTL has two levels:

- **`hfint_pe`**, one processing element (PE). It has a weight buffer, an
  input buffer, 16 vector-MAC lanes of 16 elements each, and a post-processing
  chain per lane: shift, truncation, activation function, and integer-to-
  AdaptivFloat conversion.
- **`hfint_accel_top`**, the accelerator. It has four PEs and a 1 MB global
  buffer (GB), joined as follows:
  - an arbitrated crossbar carries results from the PEs to the GB;
  - a broadcast streaming bus carries vectors from the GB to all PEs;
  - an AXI4-Lite bus connects a host to every PE and to the GB;
  - the GB has an interrupt line.

It targets RNN and fully connected layers run weight-stationary, for example
an LSTM with 256 hidden units over 100 time steps.

Default configuration (all parameters in `rtl/adaptivfloat_pkg.sv`):

| quantity | default |
|---|---|
| operand format | AdaptivFloat<8,3>: sign, 3 exponent bits, 4 mantissa bits |
| exponent-bias registers | 4 bits each |
| vector size = lanes per PE | 16, so 256 MACs per PE per cycle |
| accumulator | 30 bits ("HFINT8/30") |
| PEs | 4 |
| weight buffer per PE | 1 MB |
| input/bias buffer per PE | 4 KB |
| global buffer | 1 MB |
| host port | AXI4-Lite, 32-bit address and data |

## 1. The number format

An AdaptivFloat<n,e> word has a sign bit, `e` exponent bits `E` and
`m = n-e-1` mantissa bits `M`. Each tensor (in practice each layer's weights or
activations) has an integer `exp_bias`. A word decodes as:

```
E == 0 and M == 0          ->  0   (either sign)
otherwise                  ->  (-1)^s * 2^(E + exp_bias) * (1 + M/2^m)
```

So the representable magnitudes run from `value_min = 2^exp_bias * (1 + 2^-m)`
to `value_max = 2^(exp_bias + 2^e - 1) * (2 - 2^-m)`. The value
`2^exp_bias * 1.0` is not representable, because its code is zero.

The bias is chosen offline from the largest magnitude in the tensor:
`exp_bias = floor(log2 max|w|) - (2^e - 1)`. Quantising then works like this:

- Magnitudes below `value_min` go to 0, or to `value_min` if they are at least
  halfway to it.
- Magnitudes above `value_max` clip to `value_max`.
- Everything else keeps its exponent and has its mantissa rounded to `m` bits.

Biases are small negative numbers for typical weights and activations.

In this RTL a 4-bit bias register holds **the magnitude of a non-positive
bias**: `exp_bias = -reg`, so the range is 0 … −15. With <8,3>, a register value
of 8 gives magnitudes from 2^-8·1.0625 to 2^-1·1.9375.

## 2. Why the arithmetic can be integer: the scaling chain

Take one weight `w` with fields `(Ew, Mw)` and bias `-wb`, and one activation
`a` with `(Ea, Ma)` and bias `-ab`. Their product is:

```
w*a = ±(2^m + Mw)(2^m + Ma) * 2^(Ew + Ea) * 2^-(wb + ab + 2m)
      \________________ integer P ________________/   \__ common scale __/
```

Every product in a layer shares the scale factor on the right. The lanes
therefore only compute the integer `P`:

1. a (m+1)x(m+1)-bit mantissa multiply (5x5 bits for <8,3>);
2. an e-bit exponent add;
3. a left shift of the product by the exponent sum.

The lanes sum 16 of these `P` per cycle in an adder tree and add the result to
a signed accumulator (`hfint_vector_mac`, with the multiplier in `hfint_mult`).
A zero operand gives `P = 0`.

At the end of a dot product the real result is `acc * 2^-(wb+ab+2m)`.

**Accumulator width.** One product needs `2(m+1) + 2(2^e-1)` magnitude bits.
The sizing rule used here is `2(2^e-1) + 2m + log2(H)` bits for up to H terms,
which gives 30 bits for <8,3> and H = 256. That rule counts neither the sign
bit nor the two hidden mantissa bits, so a worst-case sum of 256 products can
need 33 bits. The RTL keeps 30 bits. The accumulator **saturates** instead of
wrapping, and sets a sticky overflow flag (PE STATUS bit 2). Real data stays far
from the bound. `ACC_W` is a parameter if you want the exact width. H is a sizing
figure, not a limit on the schedule. A pass can accumulate more than 256
terms; the LSTM example below uses 528. It then relies on the same
saturation.

**Back to n bits (`hfint_shift_trunc`).** The PE works internally with an n-bit
two's-complement integer that has `INT_FRAC = 4` fraction bits. For n = 8 it
covers [−8, 8) in steps of 1/16. The accumulator is shifted right
arithmetically by

```
shamt = wb + ab + 2m - INT_FRAC
```

which is exactly the "shift right by weight bias + activation bias" step. The
result is then clipped to the n-bit range. The shift floors: it truncates
toward −∞. A clip raises a sticky flag (STATUS bit 3). `INT_FRAC` has to be
at most 2m; an elaboration-time assertion checks this.

**Activation (`hfint_activation`).** This block works on the n-bit integer. It
has four modes, chosen by a register:

| mode | output |
|---|---|
| 0 | identity |
| 1 | ReLU |
| 2 | hard tanh: clip to [−1, 1] |
| 3 | hard sigmoid: `x/4 + 1/2` clipped to [0, 1] |

The last two are the piecewise-linear forms that LSTM gates need.

**Integer to AdaptivFloat (`int_to_adaptivfloat`).** This block takes the
output activation bias and converts back, following the quantisation rule of
section 1:

1. A leading-one detector finds the exponent.
2. The `m` bits below the leading one become the mantissa, rounded to nearest
   with ties away from zero. The carry of the rounding may bump the exponent.
3. Results too small for the format become zero or `value_min`.
4. Results too large clamp to `value_max`.

A zero keeps its sign bit.

## 3. The processing element (`hfint_pe`)

```
 AXI ─► axil_slave ─► registers / buffer writes
 broadcast bus ─► input buffer (4 KB, rows of 16 words) ─┐
 AXI ───────────► weight buffer (1 MB, rows of 16x16 words) ─┤
                                                           ▼
        16 lanes: hfint_vector_mac ─► hfint_shift_trunc ─► hfint_activation
                  ─► int_to_adaptivfloat ─► output row ─► crossbar ─► GB
```

**What a pass computes.** One pass computes `y = act(W x)` for
`NUM_GROUPS x 16` output rows. `x` has `K = NUM_CHUNKS x 16` elements.

**Buffer layout.**

- Lane `l` of group `g` handles output row `g*16 + l`.
- Weight-buffer row `W_BASE + g*NUM_CHUNKS + c` holds, for all 16 lanes, the 16
  weights of chunk `c`. A row is 2048 bits, so one read feeds every lane.
- Input-buffer row `IN_BASE + c` holds `x[16c .. 16c+15]`.
- A bias is an input element fixed at 1.0, paired with a weight column.

**Pipeline.** There are three stages:

1. issue (buffer read);
2. MAC (the first chunk of a group clears the accumulator);
3. post-process into the output register.

The PE handles one chunk per cycle, with no bubble between groups. A pass of
G groups and C chunks therefore takes **G·C + 3 cycles**; `tb_hfint_pe` checks
this. Each group leaves as one crossbar message `{last, OUT_BASE+g, 16 words}`.

**Stalls.** If the crossbar has not yet taken the previous group when the next
one finishes, the whole pipeline holds, and the STALL_COUNT register counts
the cycles.

**AUTO_RUN.** With AUTO_RUN set, a pass starts by itself when a broadcast beat
marked `last` has been written into the input buffer. This is how the GB
drives time steps without the host.

**Register and buffer map.** Byte offsets inside a PE's 4 MB AXI window:

| offset | content |
|---|---|
| `addr[21]=1` | weight buffer, row `addr[19:8]`, 32-bit word `addr[7:2]` (write only) |
| `addr[21:20]=01` | input buffer, row `addr[11:4]`, word `addr[3:2]` (write only) |
| `0x00` CTRL | W: bit0 start a pass, bit1 clear the sticky flags |
| `0x04` STATUS | R: bit0 busy, bit1 done, bit2 accumulator saturated, bit3 truncation clipped |
| `0x08` WBIAS, `0x0C` ABIAS_IN, `0x10` ABIAS_OUT | 4-bit bias magnitudes (exp_bias = −value) |
| `0x14` ACT_MODE | 0 none, 1 ReLU, 2 hard tanh, 3 hard sigmoid |
| `0x18` NUM_CHUNKS, `0x1C` NUM_GROUPS | pass shape |
| `0x20` W_BASE, `0x24` IN_BASE | buffer base rows |
| `0x28` OUT_BASE | GB row of group 0 |
| `0x2C` AUTO_RUN | bit0 |
| `0x30` PASS_COUNT, `0x34` STALL_COUNT | read-only counters |

The buffer field positions above are for the default sizes. In general, a
buffer row of B bytes sits at byte offset `row·B` within its region; rows
shorter than 4 bytes take a 4-byte slot.

## 4. The system (`hfint_accel_top`)

**Crossbar.** `arbitrated_crossbar` carries the PEs' output rows to the GB:

- It is 4-to-1 and grants round-robin.
- It has one registered output stage.
- It grants at most one PE per cycle.
- A PE that is not granted keeps its row and stalls.

**Broadcast bus.** `broadcast_bus` carries a GB row to all four PEs. It keeps a
pending mask with one bit per PE, so PEs may accept a beat in different cycles.
The beat completes when every PE has taken it.

**Global buffer.** The GB (`global_buffer`, 65536 rows of 128 bits) runs the
time-step loop. It is started by a write to its CTRL register. For each of
STEPS steps it does two things:

1. **BCAST**: it streams rows `BC_BASE … BC_BASE+BC_LEN−1` to the PEs as
   `{last, BC_DST+i, row}`. BC_DST is the input-buffer row, and the final beat
   carries `last`.
2. **COLLECT**: it writes each arriving crossbar row into the GB row named in
   the message, and waits until EXPECT rows have arrived.

After the last step it sets DONE and, if IRQ_EN is set, raises `irq` until
software clears DONE.

For a recurrent layer, the PEs' OUT_BASE values point at the rows the GB
broadcasts. Each step's outputs then become the next step's inputs. For a layer
chain, they point at the next layer's input rows.

GB registers, at offsets in its window:

| offset | register |
|---|---|
| `0x00` | CTRL (bit0 start) |
| `0x04` | STATUS (bit0 busy, bit1 DONE; write bit1 = 1 to clear) |
| `0x08` | BC_BASE |
| `0x0C` | BC_LEN |
| `0x10` | BC_DST |
| `0x14` | EXPECT |
| `0x18` | STEPS |
| `0x1C` | IRQ_EN |
| `0x20` | STEP_COUNT |
| `0x24` | RX_COUNT |

GB rows are at `addr[21]=1`, row `addr[19:4]`, word `addr[3:2]`, for read and
write.

**AXI bus.** `axil_bus` decodes `addr[24:22]`: 0–3 select PE0–PE3 and 4 selects
the GB. It returns DECERR for other windows. It carries one write and one read
at a time. Each block's port is an `axil_slave`, which turns AXI4-Lite into a
valid/ready register bus whose read data comes one cycle after acceptance.

**A typical run.** A host runs one layer like this:

1. Write each PE's weights and registers.
2. Set AUTO_RUN on each PE.
3. Put the input vector into the GB.
4. Write BC_*, EXPECT (total rows the four PEs produce per step) and STEPS.
5. Start the GB and wait for `irq`.
6. Read the results from the GB.

**Capacity, as a worked example.** Take an LSTM with 256 hidden units and a
256-element input:

- The gate weights are 4·256·512 = 512 KB at 8 bits, 128 KB per PE.
- The 512-element input vector is 32 input-buffer rows.
- The bare arithmetic is 512 cycles per step: 524,288 MACs over 1024 MACs
  per cycle.

`tb_lstm_workload` runs exactly this on the full-size accelerator. Each PE
holds one gate's weights, with its activation register set to hard sigmoid or
hard tanh, and a 33rd input chunk carries the bias. Each step the GB
broadcasts `[x; h; 1]`, the PEs return 64 rows of gate values, and the host
applies the elementwise update. In simulation:

- One step takes 574 cycles from the GB start to the interrupt: 33 broadcast
  beats, a 531-cycle pass and a few cycles of hand-off.
- 100 steps take 57.4 µs at 1 GHz.
- All 102,400 gate values match the reference bit for bit.

The LSTM's elementwise cell update (`c = f·c + i·g`, `h = o·tanh(c)`) is
outside this datapath: the PEs only compute matrix-vector products with an
activation. Larger models do not fit the 4 MB of weight buffers. These include
the 93 M-parameter Transformer, a 20 M-parameter speech Seq2Seq model and
ResNet-50.

## 5. Where this RTL departs from, or goes beyond, the original design description

The source description gives the PE datapath, the accumulator-width rule, the
buffer and GB sizes, the four-PE-plus-GB topology and its three interconnects,
the 4-bit bias registers, 8-bit operands with 3 exponent bits, and vector size
16. The following are this design's own choices:

- **Bias encoding.** The 4-bit register holds −exp_bias (0 … −15). Typical
  biases are negative and can be below −8, which a signed 4-bit field could not
  hold.
- **Internal integer.** The n-bit integer between truncation and
  integer-to-float has 4 fraction bits.
- **Truncation.** The shift floors, and clipping saturates.
- **Accumulator.** 30 bits, saturating, with a flag (see section 2).
- **Activation functions.** Identity, ReLU, hard tanh and hard sigmoid. Only
  "an activation function" is specified.
- **Rounding.** The integer-to-float conversion rounds to nearest with ties
  away from zero.
- **Buffers.** Buffers are plain synchronous arrays with byte-masked writes.
  A weight row is 16×16 words wide, so all lanes are fed in one cycle. No SRAM
  macro is modelled.
- **Control and interconnect.** The following are all invented, as the
  simplest logic that realises the described dataflow:
  - the PE schedule, register map, AUTO_RUN and stall behaviour;
  - the GB's BCAST/COLLECT sequencer and the meaning of IRQ;
  - round-robin arbitration;
  - the pending-mask broadcast;
  - the AXI4-Lite subset and address map.
- **Not built.**
  - The offline quantiser that picks exp_bias and quantises weights. The
    testbenches contain reference models of it.
  - The host.
  - The LSTM elementwise operations.
- **Timing.** The 1 GHz clock and the 16 nm implementation are not reproduced.
  Nothing here has been timed. The post-processing chain is one combinational
  stage and would probably need extra pipeline registers to reach 1 GHz.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
values computed independently in the testbench (real arithmetic or bit-level
reference functions in `tb/af_ref_funcs.svh`), prints
`TB_RESULT checks=N failures=M` at the end, and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_hfint_vector_mac` | random vectors against a real-valued dot product, clear, saturation |
| `tb_hfint_shift_trunc` | random sums and biases against floor/clip |
| `tb_hfint_activation` | all inputs, all modes |
| `tb_int_to_adaptivfloat` | exhaustive: all 256 integers × 16 biases against the quantisation rule |
| `tb_weight_buffer`, `tb_input_buffer` | masked writes, read latency, hold |
| `tb_axil_slave`, `tb_axil_bus` | channel orderings, back-pressure, decode, DECERR |
| `tb_arbitrated_crossbar` | ordering, no loss, fairness bound |
| `tb_broadcast_bus` | every PE gets every beat under random back-pressure |
| `tb_hfint_pe` | full-size PE: several passes and biases, the G·C+3 cycle count, stalls, clipping |
| `tb_global_buffer` | multi-step sequencing, IRQ, AXI readback |
| `tb_hfint_accel_top` | whole accelerator at default parameters, see below |
| `tb_lstm_workload` | LSTM, 256 hidden units, 100 time steps on the full accelerator (section 4) |
| `tb_pe_configs` | five further PE design points, 4-bit and 8-bit operands with vector sizes 4, 8 and 16, bit-exact and at full rate |

`tb_hfint_accel_top` runs the whole accelerator at default parameters, driven
only through its AXI port and interrupt, in two runs:

- **Run A** is a 16→128 fully connected layer split over the four PEs.
- **Run B** is three time steps of a 64-unit recurrence,
  `h ← hardtanh(W h)`. The outputs of each step are written back to the rows
  the GB broadcasts next.

It counts crossbar arbitration between PEs, PE stalls, truncation clips, time
steps and interrupts, and fails if any of them never happened.

To simulate with Verilator 5 (from the repository root):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
  rtl/adaptivfloat_pkg.sv tb/tb_hfint_accel_top.sv --top-module tb_hfint_accel_top
./obj_dir/Vtb_hfint_accel_top
```

Replace the testbench name to run another one. The full-size top testbench
builds in about half a minute and runs in well under a second.

**Changing sizes.** Edit the package parameters (`N_BITS`, `N_EXP`, `VEC`,
`ACC_W`, `INT_FRAC`, buffer sizes). The PE and the datapath blocks also take
them as module parameters. Message widths and the AXI address fields follow
from the package. If you change the row or buffer sizes, check that the address
fields in the PE and GB windows still fit within the 4 MB per-slave window.

`tb_pe_configs` shows how to build a PE at another design point with module
parameters (`P_N_BITS`, `P_N_EXP`, `P_VEC`, `P_ACC_W`, `P_INT_FRAC`). For
4-bit operands it uses AdaptivFloat<4,2> with 2 fraction bits in the internal
integer. Three exponent bits would leave no mantissa bit, and the datapath
needs `m ≥ 1`. It also requires `INT_FRAC ≤ 2m`. The accumulator width is
`2(2^e−1) + 2m + 8`, which is 16 bits for <4,2>.
