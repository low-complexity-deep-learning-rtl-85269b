# LSiDNN: an LS-augmented neural-network channel estimator for pilot-based OFDM

An OFDM receiver needs the complex channel gain of every resource element in a
frame before it can equalise the data. In a pilot-based frame it knows the channel
only where it sent known pilot symbols, and those measurements are noisy. The
classic answer has two steps. A least-squares (LS) estimate divides each received
pilot by the known reference. Interpolation then fills in the rest of the grid.
This is cheap, but it passes the noise straight through and interpolates poorly
when the channel changes quickly.

This core keeps the cheap LS step at the pilots and puts a small fully connected
network after it. The network both removes noise from the pilot estimates and
interpolates them to the whole frame in one step. At its default size:

| quantity | value |
|---|---|
| frame | 72 sub-carriers x 14 OFDM symbols = 1008 resource elements |
| pilots | 24 sub-carriers x 2 pilot symbols = 48 complex pilots |
| network input | 96 reals (48 real parts, then 48 imaginary parts) |
| hidden layer | 48 neurons, ReLU |
| output layer | 2016 neurons, no activation (1008 real parts, then 1008 imaginary parts) |
| parameters | 96*48 + 48 + 48*2016 + 2016 = 103,440 |
| multiply-accumulates per frame | 4608 + 96,768 = 101,376 |
| number format | 26-bit two's complement, 8 integer and 18 fraction bits, written (26,8) |

Hardware cost is set by the network: 103 k MACs per frame, against millions
for convolutional estimators of similar accuracy. The layer sizes do not depend
on the channel the network was trained for. A receiver can therefore switch to
another trained model by rewriting the parameter memories alone.

## Data path

```
 s_axis (pilots)                                                       m_axis (estimates)
   |                                                                         ^
   v                                                                         |
 ls_estimator --> c2r_concat --> fc_layer L1 --> act_buffer --> fc_layer L2 --> act_buffer --> r2c_stream
   ^                 (96)        96->48, ReLU      (48)        48->2016        (2016)
 ref_pilot_mem
                         lsidnn_ctrl sequences all of it, one frame at a time
```

- **`ls_estimator`** computes `H = Y / X` for one pilot per clock and has one
  register stage. There are two modes:
  - The default (`LS_BPSK = 1`) uses the fact that the reference pilots are +1 or
    -1. It outputs `Y` or `-Y`, chosen by the sign of the reference's real part.
    No multiplier is needed.
  - `LS_BPSK = 0` builds a general complex divider:
    - Products: `xr*yr`, `xi*yi`, `xr*xr`, `xi*xi`, `xr*yi`, `xi*yr`.
    - Numerators: `xr*yr + xi*yi` and `xr*yi - xi*yr`. Denominator: `xr^2 + xi^2`.
    - Two dividers, so six multipliers, three adders and two dividers in all.
    - Quotients are saturated to DW bits. Division by zero gives 0.
- **`ref_pilot_mem`** holds the 48 reference pilots as `{im, re}`. It is written
  through the parameter port and read combinationally by pilot index.
- **`c2r_concat`** stores the LS estimates in two banks, real and imaginary. It
  presents them to the hidden layer as one vector: `[Re 0..47, Im 0..47]`.
  Pilot `p = symbol*24 + subcarrier` is the order in which pilots arrive.
- **`fc_layer`** is a fully connected layer built from `fc_pe` processing
  elements. It is described in detail below.
- **`act_buffer`** holds one layer's output. It is split into one lane per PE, so
  a whole group of results can be written in one cycle. It has two synchronous
  read ports.
- **`r2c_stream`** reads element `j` (real part) and element `1008 + j`
  (imaginary part) of the output buffer in the same cycle. It sends them as beat
  `j` with `tdata = {im, re}`, and sets `tlast` on beat 1007. Estimates leave
  symbol-major, sub-carrier-minor: `j = symbol*72 + subcarrier`.

## The processing element and how a layer is scheduled

This part decides both the cost and the latency of the core.

### One neuron: `fc_pe`

A PE computes one neuron serially. It takes one `(input, weight)` pair per
enabled clock and multiplies them. It adds the product into an accumulator.

A counter modulo `N_IN` marks where each neuron starts and ends:
- On the first input, the accumulator is loaded with the product instead of
  adding to the old sum. The neuron's bias is latched at the same time.
- On the last input, the bias is added, and the result is scaled and saturated
  into the output register.

Because the bias is latched at the start, neurons can follow each other on the
same PE with no idle clock in between. The PE has two pipeline stages. `out_valid`
rises two clocks after the last input.

### Fixed-point arithmetic

This arithmetic is this design's own; the published description gives only the
(26,8) word length. Per neuron:

1. Each 26x26 product is kept exact: 52 bits, with 36 fraction bits.
2. Products are summed in an accumulator with `clog2(N_IN) + 1` extra guard bits,
   so the sum cannot overflow.
3. The bias is shifted left by 18 to line it up with the 36 fraction bits, then
   added.
4. The sum is shifted right arithmetically by 18. This is truncation, rounding
   toward minus infinity.
5. The result is saturated to the 26-bit range.

ReLU follows in the hidden layer. It is a multiplexer that chooses 0 when the
sign bit is set.

### A layer: `fc_layer` with `N_PE` processing elements

The layer has `N_PE` PEs. Neuron `n` runs on PE `n % N_PE`, in group `n / N_PE`.
Groups run one after another. Within a group:
- Each clock, one input element is read from the previous buffer.
- That input is broadcast to all PEs.
- At the same time, one weight per PE is read from a weight memory one `N_PE`
  words wide.

Row `g*N_IN + i` of that memory holds the weights of input `i` for the neurons
of group `g`. The bias memory has one `N_PE`-wide row per group. When a group
finishes, its `N_PE` results are written into the lanes of the next buffer. A
mask switches off lanes beyond the last neuron.

This one parameter covers both published variants:

| variant | `PE_L1` | `PE_L2` | clocks per frame (L1 + L2) | multipliers |
|---|---|---|---|---|
| compute-efficient (CE), default | 1 | 1 | 48*96 + 2016*48 = 101,376 | 2 |
| low-latency (LL) | 48 | 2016 | 96 + 48 = 144 | 2064 |

Any value in between trades multipliers for time: `ceil(N/N_PE)` groups of `N_IN`
clocks each.

In the CE variant, a single PE and a single weight memory hold the whole matrix.
Choosing a neuron means choosing which weight vector to read.

In the LL variant, every neuron of a layer has its own PE:
- The previous layer's outputs are still broadcast to the PEs one element at a
  time.
- What changes is the output buffer. It is split into one lane per neuron, so
  every PE can write its result in the same cycle.

The weight memories are arrays with a registered read, so a synthesis tool can
map them to block RAM. Each `fc_layer` adds four clocks of pipeline overhead:
- memory read;
- PE stage 1;
- PE stage 2;
- the buffer write.

## Frame sequencing: `lsidnn_ctrl`

The controller has four states, visited in a fixed ring:

| state | what happens | leaves when |
|---|---|---|
| S0 | idle, the input stream is ready | the first pilot is accepted |
| S1 | pilots 2..48 are accepted and LS-estimated, one per clock; `s_axis_tready` drops after pilot 48 | the last LS estimate is written |
| S2 | hidden layer runs, then output layer | the output layer reports done |
| S3 | the 1008 estimates are streamed | the last beat is accepted, back to S0 |

Only one frame is in the core at a time. The next frame's pilots are refused
(`tready` low) until the previous frame has left the output port. `busy` is high
outside S0.

A `tlast` on the wrong input beat does not resynchronise the core. It still takes
exactly 48 pilots per frame, and `frame_err` is set for that frame.

### Latency

From the handshake of the last pilot to the first valid estimate, latency is:

```
G1*N_IN + G2*N_HID + 13 clocks,    G1 = ceil(48/PE_L1), G2 = ceil(2016/PE_L2)
```

- CE (default): 101,389 clocks.
- LL: 157 clocks.

After the first estimate, the output runs at one estimate per clock while
`m_axis_tready` is high. With back-pressure it holds `tdata`, `tvalid` and
`tlast` steady until the handshake.

## Loading a model

All parameters sit in on-chip memories and are written through one port:

| `prm_sel` | memory | `prm_row` | `prm_col` | data |
|---|---|---|---|---|
| `PRM_W1` (0) | hidden-layer weights | neuron 0..47 | input 0..95 | `prm_data[25:0]` |
| `PRM_B1` (1) | hidden-layer biases | neuron 0..47 | - | `prm_data[25:0]` |
| `PRM_W2` (2) | output-layer weights | neuron 0..2015 | input 0..47 | `prm_data[25:0]` |
| `PRM_B2` (3) | output-layer biases | neuron 0..2015 | - | `prm_data[25:0]` |
| `PRM_REF` (4) | reference pilots | pilot 0..47 | - | `{im, re}` |

There is one write per clock, so a complete model takes 103,488 clocks. Write only
while `busy` is low. An assertion flags a write while a layer is running.

Switching channel models is just a reload between frames. Storing several models
and deciding which one to load is left to the system around the core.

Weights and biases use the same (26,8) format as the data path. Output neuron
`k < 1008` is the real part of estimate `k`. Neuron `1008 + k` is its imaginary
part.

## Parameters of `lsidnn_top`

| parameter | default | meaning |
|---|---|---|
| `DW`, `FRAC` | 26, 18 | word length and fraction bits: (26,8) |
| `N_FP`, `N_SP` | 24, 2 | pilot sub-carriers, pilot symbols |
| `N_F`, `N_S` | 72, 14 | sub-carriers, OFDM symbols of the estimated grid |
| `N_HID` | 48 | hidden neurons |
| `PE_L1`, `PE_L2` | 1, 1 | PEs in the hidden and output layer |
| `LS_BPSK` | 1 | 1 = sign-select LS, 0 = complex divider |

A variant with 1024 or 1056 hidden neurons is just a change of `N_HID`. A variant
with two hidden layers would need another `fc_layer` and buffer, which this RTL
does not have.

## Where this RTL departs from, or adds to, the published design

- **Arithmetic details:**
  - Only the (26,8) word length is given.
  - Exact products, guard bits, bias alignment, truncation toward minus infinity
    and saturation are this design's own choices.
  - A model trained in floating point and quantised for this core should be
    checked against this arithmetic.
- **Data ordering:**
  - The order of pilots inside the input vector and of estimates inside the
    output vector is assumed here.
  - The weights must be trained for the same order.
- **Reference-pilot memory:**
  - Read combinationally, so the LS step fits in one clock.
  - A block-RAM version would add one clock of read latency in S0/S1.
- **Scheduling:**
  - Layers run one after the other, and frames do not overlap.
  - The published design keeps both layers resident on chip, as here. It does not
    say whether frames are pipelined through the layers.
- **The system around the core is not here:**
  - The published system has a processor, DMA engines, an interconnect and
    external memory that feed the core and collect its output.
  - This core exposes plain AXI-Stream ports and a simple parameter-write port in
    their place.
  - The published execution times include that system. The CE/LL ratio of this
    RTL (about 650x in clocks) is not comparable with the published time ratio.
- **Resources of the LL variant:** the published LL implementation reports only 32
  DSP blocks. Its PEs were therefore almost certainly time-shared in a way not
  described. Here `PE_L2 = 2016` really builds 2016 multipliers.
- **Reset:** state, counters and valid flags are reset asynchronously (active-low
  `rst_n`). The parameter and data memories are not reset.

## Simulating

Everything simulates with plain Verilator 5. The shared testbench packages must
come first. For example, the full-size end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/lsidnn_pkg.sv tb/tb_model_pkg.sv rtl/*.sv tb/lsidnn_bench.sv tb/tb_lsidnn_top.sv \
  --top-module tb_lsidnn_top -o sim && ./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. It
also has a watchdog that counts a failure if the design hangs.

| testbench | what it covers |
|---|---|
| `tb_relu`, `tb_ref_pilot_mem`, `tb_c2r_concat`, `tb_act_buffer` | the small blocks against direct reference values |
| `tb_ls_estimator` | both LS modes against an exact complex-division model, including saturation and the one-clock latency |
| `tb_fc_pe` | neuron results against a bit-exact model, back-to-back neurons, saturation, the two-clock latency |
| `tb_fc_layer` | a 7->10 layer on 3 PEs with ReLU (partial last group) and the full 96->48 layer on one PE; timing of `done` |
| `tb_r2c_stream` | one beat per clock, and stable data under random back-pressure |
| `tb_lsidnn_ctrl` | the state ring, the pilot count and the start pulses |
| `tb_lsidnn_top` | **full size, default parameters (CE, BPSK LS)** |
| `tb_lsidnn_ll_full` | full size, LL (`PE_L1 = 48`, `PE_L2 = 2016`) |
| `tb_lsidnn_ll` | a shrunken frame (6 x 3 grid, 4 x 2 pilots, 5 hidden), multi-PE groups, divider LS |

The three end-to-end tests share `lsidnn_bench.sv`, which does the following:
1. Loads a random model through the parameter port.
2. Sends frames with gaps in the input and random output back-pressure, plus one
   frame with a misplaced `tlast`.
3. Reloads a second model with saturating neurons, to show that switching models
   works.
4. Compares all 1008 complex estimates of every frame with a bit-exact reference
   model written in the testbench.
5. Checks the latency formula above.

It counts each mechanism (negative BPSK reference, input gap, output
back-pressure, frame error, saturation, ReLU clamp, model reload). A mechanism that never happened counts as a failure. The
full-size CE test runs in under a second of simulation time on a workstation. The
full-size LL test takes about a minute to build.

Correctness here means agreement with the bit-exact reference model. No trained
weights come with this RTL, so MSE and bit-error rates on real channels have not
been measured.
