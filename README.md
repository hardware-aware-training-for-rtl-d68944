# LMU keyword-spotting accelerator

This is an always-on keyword spotter. It runs a small recurrent network, a
stack of Legendre Memory Unit (LMU) layers, once for every 20 ms audio frame and
reports one of 12 labels: ten keywords, "silence" and "unknown". The network
keeps its state from frame to frame. It is never reset between utterances, so
each frame costs only one step of the recurrence. The arithmetic is narrow:
weights are 4-bit, activities are 7-bit values in signed 8-bit words, and every
product is an 8 x 8 signed multiply. The whole frame is computed on one array of
P multiply-accumulate (MAC) lanes, each taking C input columns per clock. That
array works through the frame as a short list of matrix-vector products. At the
default size a frame takes 1139 clocks, 12.4 ms at a 92 kHz clock.

The design follows the network, the number formats and the frame rate of
*Hardware Aware Training for Efficient Keyword Spotting on General Purpose and
Specialized Hardware* (Blouw, Malik, Morcos, Voelker, Eliasmith). That paper
gives the equations and the precisions. It does not describe the inside of its
accelerator. The datapath organisation, the schedule, the memory layout and
the network's layer sizes here are this design's own; the last section lists
them.

## The network

One LMU layer takes an input vector x_t and keeps two kinds of state. The
nonlinear state is h (NH units). Each of NK linear memories holds a state m^k of
ND numbers. Per frame the layer computes:

```
u_t^k = e_x^k . x_t + e_h^k . h_{t-1}                 (a scalar per memory k)
m_t^k = A^k m_{t-1}^k + B^k u_t^k                      (A: ND x ND, B: ND)
h_t   = ReLU( W_x x_t + W_m [m_t^1 ; ... ; m_t^NK] + b )
```

Here A and B are the fixed, discretised Legendre-memory matrices, and e_x, e_h,
W_x, W_m and b are trained. In this variant of the LMU, h does not feed back
into itself, and m does not feed back into u or into the input. The paper's
prose also says the nonlinear-to-linear connection was removed, while its
equation keeps the e_h . h_{t-1} term in u_t; this design follows the equation,
and loading e_h = 0 gives the other reading. NL such layers
are stacked, and the h_t of one layer is the x_t of the next. A dense output
layer, y = W_o h_t + b_o with NOUT = 12 scores, follows the last layer. The label
is the index of the largest score.

Default sizes (parameters of `lmu_kws_top`, defaults in `lmu_pkg`):

| parameter | default | meaning |
|---|---|---|
| NX   | 40  | features per frame (e.g. MFCCs) |
| NH   | 128 | nonlinear units per LMU layer |
| NK   | 2   | linear memories per layer |
| ND   | 64  | order of each linear memory |
| NL   | 3   | LMU layers |
| NOUT | 12  | labels |
| P    | 128 | MAC lanes (output rows per group) |
| C    | 2   | input columns per clock (multipliers per lane) |

With these sizes the trained weights number 89,936 at 4 bits, which is 360 kbit.
That is the size of the paper's main model, "LMU-2" (361 kbit, 95.9 % on Speech
Commands). The paper does not give that model's layer shapes, so the shape
above is a guess with the right size, not the trained model.

## Number formats

| quantity | format |
|---|---|
| features x, u, m, output scores | signed 8 bit, saturated to [-128, 127] |
| h (after ReLU) | [0, 127], i.e. 7 bits in a signed 8-bit word |
| trained weights | signed 4 bit, sign-extended to 8 bit at the multiplier |
| A, B coefficients | signed 8 bit |
| biases | signed 16 bit, preloaded into the accumulator |
| accumulators | signed 24 bit, wrapping |

Every sum is brought back to 8 bits by `requant`: y = sat((acc + 2^(s-1)) >>> s),
then ReLU for h. The host sets the shift s for each of the four kinds of
operation (`cfg_shift[0..3]` for u, m, h and the output). Any fixed-point scale
a trained model needs has to be folded into the weights, the biases and these
shifts.

## How a frame is executed

### Operations and groups

A frame is a fixed list of `num_ops = NL*(NK+2)+1` matrix-vector operations,
built by `lmu_pkg::op_desc`:

```
for each layer l:   U      rows NK   input [h_{t-1} ; x_t]       -> u
                    M(k)   rows ND   input [m_{t-1}^k ; u^k]     -> m_t^k   (k = 0..NK-1)
                    H      rows NH   input [x_t ; m_t (all k)]   -> h_t     (+bias, ReLU)
then:               OUT    rows NOUT input h_t of layer NL-1     -> y       (+bias)
```

The input of each operation is two contiguous pieces of the state memory, so
an operation is described by two (base, length) segments, a destination, and
three flags: coefficient memory or weight memory, bias, ReLU. The rows are
handled in groups of P, one row per MAC lane. For each group the controller
streams the input vector C elements per clock (the state memory has C read
ports). Those elements go to all lanes at once, and each lane gets its own C
weights from the same memory word. A lane adds its C products to its sum in the
same clock. The cycle count of a group is therefore its number of input
columns divided by C, rounded up; a missing last column is fed as zero.

### Pipeline of one group

```
clock        c0      c1      ...   cN-1     cN      cN+1
issue        cols    cols          last
             0..C-1  C..2C-1       cols
memories             data 0        ...      data N-1
MAC (lanes)          first+bias    ...      acc
controller                                  TAIL    LATCH -> copy P sums to write-back,
                                                             next group issues at cN+2
```

When a group starts (`first`), each accumulator is loaded with bias + product,
so no clear cycle is needed. The write-back buffer holds the P sums of the
group just finished. It rescales them and writes them into the state memory
one per clock while the next group is being accumulated. Here N is the
number of column clocks, ceil(columns / C).

### Hazards

The next operation often reads what the previous one is still writing back:

* the U of layer l+1 reads h_t of layer l;
* H reads m_t of the last linear memory;
* the OUT operation reads the last h_t;
* M(k) reads u^k.

The controller compares each of the C read addresses with the range still
waiting in the write-back buffer. If any of them is in that range, it stalls
the column stream for a clock (`ev_hazard`). Reads then trail the writes.
Because write-back runs at one word per clock and reads at C words per clock,
a read that starts right behind a write-back stalls about every other clock.
To keep this rare, U reads its own layer's h_{t-1} (long since written) before
x_t, which is the previous layer's fresh h_t. At the default size about 67
clocks per frame are stalls, mostly in the OUT operation. If a group finishes
while the buffer still holds the previous group, the controller waits in LATCH
(`ev_wb_wait`). That happens when a group has fewer column clocks than the
previous group has rows, e.g. a 33-clock M group after a 64-row one.

### State across frames

h, u and m live in the state memory and are never cleared by the hardware.
The m_t update needs m_{t-1} of the same memory as input while it writes m_t,
so each layer has two m banks. The controller's `bank` bit selects the bank
written in the current frame and flips at the end of every frame. h needs no
second copy, because the U operation reads h_{t-1} before the H operation of
the same layer overwrites it.

## Memories and how to load them

The weight, coefficient and bias memories are `sram_1r1w` instances: one write
port, and one read port with one clock of latency. The state memory is an
`sram_1wnr` with one write port and C read ports of the same timing; the host
uses read port 0. The host can write them, and read the state memory,
only while `busy` is low.

**State memory** (8-bit words, `act_depth` = 1210 words by default), laid out as:

```
0                       x_t                         NX words
for l = 0..NL-1:  h_l   = NX + l*S                  NH words
                  u_l   = h_l + NH                  NK words
                  m_l,0 = u_l + NK                  NK*ND words (bank 0, memory k at +k*ND)
                  m_l,1 = m_l,0 + NK*ND             NK*ND words (bank 1)
out = NX + NL*S                                      NOUT scores
where S = NH + NK + 2*NK*ND
```

**Weight memory** (P x C x 4-bit words), **coefficient memory** (P x C x 8-bit
words) and **bias memory** (P x 16-bit words) are all filled in schedule order. Go
through the operations in the order above, and through each operation's
row-groups in order. For each group:

* weight or coefficient memory: one word per C input columns, in column order.
  Sub-word c*P+i (bits [(c*P+i)*W +: W]) holds the weight of row g*P+i for
  column j*C+c of word j; unused lanes and the missing columns of a last,
  partial word are 0. The columns are the operation's two segments in order:
  for U, the e_h weights then the e_x weights; for M(k), the columns of A^k
  then B^k; for H, the W_x weights then W_m.
* bias memory: one word per group of H and OUT, lane i = b[g*P+i].

The U, H and OUT operations use the weight memory and M uses the coefficient
memory, so each memory's read address is a counter that restarts every frame.
At the defaults the sizes are 744 weight words of 1024 bits, 198 coefficient
words of 2048 bits and 4 bias words of 2048 bits. `wgt_depth`, `coef_depth` and `bias_depth` in `lmu_pkg` compute them
for any size.

## Using it

1. Reset (`rst_n` low). Load the weights, coefficients and biases. Write zeros
   to the state memory once, so the network starts from a known state.
2. Every 20 ms: write the NX features to addresses 0..NX-1, set `cfg_shift`,
   and pulse `start` for one clock.
3. `done` pulses for one clock when the last output score has been written.
   `class_idx` / `class_score` then give the winning label, with ties going to
   the lower index, and `class_valid` is high. Every u, m, h and score of the
   frame can be read back from the state memory.

## Timing and throughput

Clocks per frame ≈ sum over all groups of (ceil(input columns / C) + 2), plus
the hazard stalls and write-back waits, plus the final write-back of the
scores. At the defaults there are 13 groups with 1878 input columns, i.e. 942
column clocks. One frame takes 1139 clocks in simulation: 12.38 ms at 92 kHz,
well inside the 20 ms frame (1840 clocks at 92 kHz) and below the 13.38 ms
(1231 clocks) per frame that the paper reports for its 92 kHz design point.
With C = 1 the same array needs 1921 clocks (20.9 ms at 92 kHz), which is why
C = 2 is the default. About a third of the column clocks go to the U
operations, which have only NK = 2 rows but stream every input column with 126
of the 128 lanes idle. P and C set the trade between multipliers and clocks.
Layers whose NH exceeds P take several groups. The paper also quotes 39.59 ms of latency for
a 40 ms window; here a result is ready 1139 clocks after `start`, and how
features of overlapping windows reach the host is outside this design.

## Files

| file | contents |
|---|---|
| `rtl/lmu_pkg.sv` | widths, default sizes, `op_t`, `op_desc` (the schedule), memory map and memory-size functions |
| `rtl/lmu_kws_top.sv` | top: memories, controller, MAC array, arg-max, host ports |
| `rtl/lmu_controller.sv` | frame sequencer, write-back buffer, hazard stall, bank swap |
| `rtl/mac_array.sv` | P lanes of C 8 x 8 multipliers with accumulate and bias preload |
| `rtl/requant.sv` | round, shift, saturate, ReLU |
| `rtl/sram_1r1w.sv` | synchronous 1R1W memory (weights, coefficients, biases) |
| `rtl/sram_1wnr.sv` | synchronous memory with one write and NR read ports (state) |
| `rtl/argmax.sv` | streaming arg-max of the output scores |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_lmu_kws_full` runs the default size |
| `tb/lmu_tb_driver.sv` | reference model and checker of whole frames, used by the top-level tests |
| `tb/lmu_tb_pair.sv` | one top and one driver at a given size |

## Simulation

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/lmu_pkg.sv \
          tb/tb_lmu_kws_top.sv --top-module tb_lmu_kws_top -o sim
./obj_dir/sim
```

For another test, replace `tb_lmu_kws_top` by `tb_lmu_kws_full`, `tb_lmu_controller`,
`tb_mac_array`, `tb_requant`, `tb_sram_1r1w`, `tb_sram_1wnr` or `tb_argmax`. Each test prints
`TB_RESULT checks=N failures=M`. Each also has a watchdog that counts a failure
if the test hangs.

What the tests establish:

* `tb_lmu_kws_top` runs two reduced sizes for five frames each. One size
  (NH=12, P=8, C=1) has two-group layers and write-back waits. The other
  (NH=8, NL=3, NOUT=12, C=2) has read-hazard stalls. After every frame it compares every u, m, h
  and output score, the label and the cycle budget with an independent integer
  model of the equations. It fails if a stall, saturation, ReLU clipping, a bank
  swap or carried-over state never occurred.
* `tb_lmu_kws_full` does the same at the default size for 50 frames (one
  second of audio) and requires each frame to fit into 1231 clocks (13.38 ms at
  92 kHz).
* `tb_lmu_controller` checks the controller's exact write-address sequence,
  its read counts per memory, the number of groups, the bank swap and the frame
  length, using its own copy of the memory map.

The network used in the tests is random, not trained. The tests show that the
hardware computes the quantised equations exactly. They say nothing about
keyword accuracy.

## What comes from the paper and what does not

From the paper:

* the network: the LMU equations above with ReLU, several linear memories
  concatenated into W_m, several LMU layers and a feed-forward output layer;
* the model formats: 4-bit weights, 7-bit activities, 8-bit multiplication;
* the 12 labels;
* the 20 ms frame, with state kept across frames;
* the use of MAC units and SRAM, and parallelism as a design parameter.

This design's own choices:

* all layer sizes (NX, NH, NK, ND, NL), sized only to match LMU-2's 361 kbit;
* the number of lanes P and columns per clock C;
* the U input order [h_{t-1} ; x_t];
* the state memory with C read ports;
* the row-parallel MAC array;
* the operation schedule and the memory layouts;
* the overlapped write-back and the hazard stall;
* the m bank pair;
* power-of-two rescaling with round-half-up and saturation (no divider is used);
* 8-bit A/B coefficients;
* 16-bit biases and 24-bit accumulators;
* a separate u per linear memory;
* arg-max output and the host interface.

Not built:

* the MFCC front end (features are written by the host);
* the clock and power circuitry;
* support for 8-bit-weight models such as LMU-1;
* sparse storage for the pruned models LMU-3 and LMU-4.

The default array meets the paper's 92 kHz, 13.38 ms-per-frame design point
(see Timing). The paper's power and transistor figures are estimates for
its own design in a 22 nm process and do not carry over to this RTL.
