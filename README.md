# TREA: a time-multiplexed 4/8-bit edge accelerator in SystemVerilog

TREA runs small convolutional networks on a single row of 100 multiply-accumulate
units that is reused for every layer. Three ideas keep that row small and busy:

* **Multiplier-free arithmetic.** A weight is applied as a short sum of
  signed powers of two, picked greedily from its most significant digit down
  (MSD-guided power-of-two quantisation). Each term is a shift of the input,
  and each shifted term may have its low bits dropped before it is added
  (run-time bit truncation), which trades accuracy for narrower adders.
* **Dual precision from one datapath.** Each MAC unit holds four 4-bit
  shift-and-add multipliers. In 4-bit mode (FxP4) they form a four-term dot
  product every cycle; in 8-bit mode (FxP8) the same four units compute the
  four digit products of one 8-bit multiply, which are recombined by shifts.
* **Pruning that matches the lane count (SHARP).** Every K x K kernel keeps
  exactly R = 4*floor(K*K/8) weights (4 of 9 for 3x3, 12 of 25 for 5x5),
  always a multiple of the four SIMD lanes, so no lane idles.

Results of a whole row leave the array in parallel and are fed one per cycle
through a parallel-in/serial-out register (PISO) into a single shared
activation core (RQ-NAF) that computes ReLU, Sigmoid or Tanh. Sigmoid and Tanh
both come from one hyperbolic CORDIC. The activated values are written back
into the on-chip feature memory as the next layer's input.

This RTL implements that architecture. The datapath follows the published
description closely. The controller, the memory organisation, the host
interface and the number formats had to be designed here, because the
source gives only their names or their function. The last section lists
these choices.

## Arithmetic: MSD power-of-two products (`spq_mult`)

For a weight residual W_i, stage i picks q_i = sign(W_i) * 2^e. Here e is the
position of the leading one of |W_i|. The stage then updates
W_{i+1} = W_i - q_i and y += (x << e). With truncation setting `t`, the term
`x << e` is floored to a multiple of 2^t before it is added. The floor is an
arithmetic right shift followed by a left shift. Five pipeline stages are
built, one term per stage, and a zero residual makes a stage pass its input
through unchanged. For 4-bit weights this gives:

* `t = 0`: the exact product, because a 4-bit weight has at most 4
  non-zero binary digits;
* `t = 3`: the truncation of the source's Eq. 3, which keeps each term at the
  input's own word length when the weight is read as Q1.3.

Each operand has a signedness flag. This lets FxP8 mode multiply the unsigned
low digits. The product is 2N+1 bits wide, and the latency is `STAGES` cycles
at one product per cycle.

Worked example, checked by the testbench with an 8-bit instance: input
1.59375 (Q2.5) times weight 0.875 (Q1.7), truncated to the input's 5
fraction bits. The terms come out as 25, 12 and 6 units of 2^-5, which is
43/32 = 01.01011. The source figure prints 01.01101 for this example. Its
second term is not the floor of x/4, so this design follows the equation,
not the figure.

## The dual-precision MAC (`dq_mac`, `mac_array`)

Operands come as 16-bit words: four signed nibbles in FxP4, or one byte in
bits [7:0] in FxP8.

```
FxP4:  sum_l  x_l * w_l                      (4 lanes, signed nibbles)
FxP8:  x*w = xL*wL + (xH*wL + xL*wH) << 4 + (xH*wH) << 8
       (low digits unsigned, high digits signed)
```

In FxP8 the four lanes run exact (t = 0), and the composed 16-bit product is
floored by `trunc` LSBs. With `trunc = 7` this equals Eq. 3 for 8-bit
weights. In FxP4 each lane uses min(trunc, 3).

The accumulator is 24 bits (16 + ACC_K). The bias is loaded into a bias
register before a tile starts. The accumulator adds it together with the
tile's first term, so the bias costs no accumulation cycle of its own.
On the last term, the *bit-trunc* stage shifts the sum right by
`out_shift` and saturates it to 8 bits.

Pipeline: input register, 5 multiplier stages, lane-sum register,
accumulator, and output register. `mac_out` appears 9 clock edges after the
edge that takes the last term (`STAGES + 4`). Throughput is one operand
word per cycle: 4 MACs per cycle per unit in FxP4, 1 in FxP8.

`mac_array` puts 100 units side by side. Weight, bias and control go to all
units. Each unit gets its own operand word and produces one output column.

## Weight words, SHARP and the input mux

A weight word is 40 bits:

```
[39:34] idx3  [33:28] idx2  [27:22] idx1  [21:16] idx0  [15:0] weights
idx = {ky[2:0], kx[2:0]}   weights = 4 nibbles (FxP4) or one byte in [7:0] (FxP8)
```

The indices say which kernel position each lane's weight belongs to, so
pruned kernels need no zero padding. Cycles (weight words) per input channel
of one output tile:

| kernel | SHARP FxP4 | SHARP FxP8 | dense FxP4 | dense FxP8 |
|--------|-----------:|-----------:|-----------:|-----------:|
| 1x1    | 1 (dense)  | 1 (dense)  | 1          | 1          |
| 3x3    | 1          | 4          | 3          | 9          |
| 5x5    | 3          | 12         | 7          | 25         |

Dense kernels fill the last word with zero weights. A 1x1 kernel has R = 0,
so it always runs dense.

The control engine copies the K input rows of the current channel from L1
into a K x 104-byte line buffer. `input_mux` gives MAC unit `u` the pixel
`rows[ky][u+kx]` for each lane. In FxP4 it saturates each pixel to a signed
nibble and packs the four nibbles into the operand word.

## Control engine and the schedule (`trea_ce`, `trea_regs`)

One tile is one output row of one output channel, at most 100 pixels wide.
The loops run in this order: layer > output channel m > output row y > input
channel c > weight step s. Per tile:

1. Read bias `b_base+m` and load it into the array (2 cycles).
2. For each input channel: load K rows from L1, one per cycle, then issue
   the channel's weight words, one per cycle. Each word is read from the
   weight memory one cycle before it is issued.
3. Wait for the array's result, then hand the row to the PISO and pulse
   **Compute_Done**. If the PISO is still serialising the previous row, the
   engine waits and counts a *stall cycle*.

A tile therefore takes about 2 + C*(K + steps) cycles of issue time. The
PISO needs OW cycles per row. Layers with few input channels are limited by
the serial activation path; those with many channels are limited by the
array. After the last tile of a layer, the engine waits until the PISO, the
activation core, the FIFO and the write-back are empty. It then pulses
**Layer_Done** and loads the next descriptor. After the last layer it pulses
**DNN_Done**.

Convolution is stride 1 with no padding: OH = H-K+1 and OW = W-K+1. Each
output channel sums all input channels. A fully connected layer is run as a
1x1 layer with H = W = 1 and one input channel per feature, which keeps only
one unit busy.

Addressing, with every base taken from the layer descriptor:

```
input row r of kernel, channel c, tile y : L1 row  in_base + c*H + y + r
weight word s of (m, c)                  : w_base + (m*C + c)*steps + s
output pixel (m, y, x)                   : L1 row out_base + m*OH + y, column x
                                           output buffer byte (m*OH + y)*OW + x
```

`trea_regs` holds up to 8 layer descriptors (the layer parameter flag
registers) and the control and status registers:

| offset | register |
|--------|----------|
| 0x000 | write bit0 = start; read {cfg_err, dnn_done, busy} |
| 0x004 | number of layers (1..8) |
| 0x008 | clock cycles of the last run |
| 0x00C | stall cycles of the last run |
| 0x100 + 0x20*l + 4*f | descriptor l, field f |

Descriptor fields: f0 in_w (<=104), f1 in_h, f2 in_ch, f3 out_ch,
f4 {af[9:8], sharp[5], fxp4[4], k[2:0]}, f5 {out_base[27:16], in_base[11:0]},
f6 {b_base[23:16], w_base[11:0]}, f7 {trunc[10:8], out_shift[4:0]}.
Activation codes: 00 ReLU, 01 Sigmoid, 10 Tanh, 11 none.

## The shared activation path (`piso`, `rq_naf`, `cordic_hyp`, `sync_fifo`, `out_writer`)

`piso` captures the 100 results of a tile in one cycle. It then sends OW of
them, one per cycle, each with a tag that gives its destination row and
column.

`rq_naf` works on signed Q3.4 values (1.0 = 16). It has 9 stages and accepts
one sample per cycle:

* Stage 1 reduces the argument: z = k*ln2 + r with |r| <= ln2/2, because a
  hyperbolic CORDIC converges only for |z| up to about 1.1.
* Stages 2-8 run seven CORDIC iterations (i = 1,2,3,4,4,5,6, with i = 4
  repeated as the method requires) and produce cosh r and sinh r.
* Stage 9 forms e^r = cosh + sinh and scales by 2^k with shifts. Two 2:1
  multiplexers then pick (e^z, 1+e^z) for Sigmoid or (e^z - e^-z,
  e^z + e^-z) for Tanh, and a divider forms the quotient, rounded to nearest.

ReLU and identity skip the CORDIC and are only delayed, so results stay in
order. The CORDIC constants atanh(2^-i) and 1/K_h are computed when the
design is elaborated, so there is no table. The accuracy is within one LSB
of the real function over the whole 8-bit input range.

`sync_fifo` (16 entries, first-word fall-through) buffers the activated
results. `out_writer` pops one per cycle and writes it to L1 and to the
output buffer. The write-back has priority over host writes to L1.

## Memories and host interface

| memory | size | organisation |
|--------|------|--------------|
| L1 feature memory (`l1_mem`) | 1024 rows x 104 bytes | byte write, whole-row registered read |
| weight memory (`sdp_ram`) | 4096 x 40 bit | 1 write port, 1 registered read port |
| bias memory (`sdp_ram`) | 256 x 16 bit | same |
| output buffer (`sdp_ram`) | 8192 x 8 bit | written by the core, read by the host; a layer with more than 8192 outputs wraps around, so only its last 8192 remain (L1 holds them all) |

The host talks to the core through an AXI4-Lite slave (`axi_lite_slave`)
with 24-bit byte addresses:

```
0x0xxxxx registers    0x1xxxxx weights (word i at 8*i: low 32 bits, then bits 39:32 at +4 commits)
0x2xxxxx biases (4*i)  0x3xxxxx L1 pixel (row,col) at 512*row + 4*col    0x4xxxxx output buffer (4*i, read)
```

A typical run: write the image into L1, the weights and the biases, then the
descriptors and the layer count. Write 1 to 0x000, then wait for
`dnn_done` (a pin or status bit 1). Read the last layer from the output
buffer. Compute_Done, Layer_Done and DNN_Done are also top-level pins.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Each testbench computes its expected values
with its own reference model. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/trea_pkg.sv rtl/*.sv tb/tb_trea_top.sv \
          --top-module tb_trea_top -o sim && obj_dir/sim
```

Replace `tb_trea_top` with any other testbench name. `tb_trea_top` runs the
full-size design (100 units, default memories) through a four-layer network:

* 3x3 FxP4 SHARP with truncation and ReLU;
* 5x5 FxP8 SHARP with truncation;
* 1x1 FxP4;
* 1x1 FxP8 with Sigmoid. The run is then repeated with Tanh.

The intermediate layers are compared exactly with a reference model. The
last layer is compared within 1 LSB. The testbench counts the issue cycles
of every layer and checks that these happened: FxP4/FxP8 switches, stalls,
saturation, effective truncation and every done signal. The whole network
takes 4134 cycles. `tb_trea_ce` checks the engine's address and issue
sequence and the stall counter against memory models. `tb_workload_yolo_tiny` runs the first two convolutions of a tiny YOLO
detector (3->16 channels in FxP8, then 16->32 in FxP4, both 3x3 SHARP) on a
10 x 102 strip of the image. It takes 32,391 cycles, of which only 4,608
issue MACs. With few input channels per tile, the serial activation path
(about 100 cycles per output row) sets the pace, not the array. The other
testbenches exercise one block each.

## How this design differs from or adds to the source

* **Own choices where the source is silent:**
  * the loop order and tile shape (one output row per tile);
  * line-buffer loading, weight-word and index format, and address map;
  * register map, AXI4-Lite as the flavour of AXI, and memory depths;
  * FIFO depth, the Q3.4 activation format and the activation codes;
  * the saturating bit-trunc and the 24-bit accumulator.
* **Range reduction** in front of the CORDIC is an addition. Without it,
  Sigmoid and Tanh would be wrong for |z| > 1.1.
* The **L1 cache** is built as a software-managed scratchpad. No tags or
  refills are described.
* **Power gating** of the activation core's adders is modelled by forcing
  their operands to zero when ReLU is selected.
* **Not supported:**
  * stride above 1, padding and pooling;
  * depthwise convolution;
  * streaming weights or features from off-chip memory.

  None of these are described for this datapath, so the networks the source
  evaluates do not fit on-chip at these sizes. The YOLO variants have
  1.9M-46.5M parameters and 416-pixel rows, against 16,384 weight slots and
  104-byte rows here. A larger row width, L1 and weight memory are only a
  matter of the parameters in `trea_pkg`.
* The multiplier is built only in its pipelined form (five stages, one
  product per cycle). The source also describes a single-stage iterative
  form that reuses one shift-and-add stage over several cycles. That form is
  not built.
* The host processor is outside this design. The testbenches act as the
  host through the AXI port.
