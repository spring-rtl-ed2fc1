# A profile stream for HLS streaming accelerators, in RTL

A streaming neural-network accelerator is a chain of layers joined by FIFOs.
How full those FIFOs get at run time decides whether the design is
over-provisioned or, if they are too small, whether it deadlocks. The usual
ways of watching them drag every signal out to its own port, buffer or
logic-analyser probe, and that does not scale past a handful of signals.

The design here takes another route. Next to the data stream runs a
**profile stream**: one word per inference that visits the same layers as the
data, in the same dataflow order. Each profiled layer reads the profile word
its predecessor produced, appends what it measured during that inference (here
the largest fill level its input FIFO reached), and passes the longer word on.
Where the data stream splits, the profile stream splits; where the data
merges, the profile merges. At the output of the core the host receives one
word per inference whose elements are, in a fixed order known in advance,
the measurements of every profiled FIFO. No extra ports, no per-signal
memories.

This repository gives that mechanism as synthesizable SystemVerilog, together
with the layers it rides on and a complete example network: a randomly
interconnected neural network (RINN) in miniature, with one split and one
merge.

## 1. What one layer measures

Every inter-layer channel is a `stream_fifo`, a shift-register FIFO whose fill
pointer is the one HLS-generated FIFOs use:

```
mOutPtr <= all ones           on reset      (empty)
mOutPtr <= mOutPtr + 1        push, no pop
mOutPtr <= mOutPtr - 1        pop, no push
```

`mOutPtr` is therefore *occupancy − 1* (−1 when empty). The FIFO brings
`mOutPtr + 1`, the occupancy, out as the port `size`. The consuming layer
samples `size` in every cycle in which it pops the FIFO and keeps the maximum
over the inference (`depth_monitor`). The sample includes the word being
taken, so a FIFO that never holds more than one word reports **1**, and a
full FIFO reports its depth.

Whether the profiler should see the raw pointer or the pointer plus one is the
one point where the source description does not settle the question. The
hardware it shows hands `mOutPtr` itself to `size()`; its measurements never
go below 1, and it profiles a depth-1 Dense FIFO, a ReLU FIFO and a clone FIFO
at 1. Raw `mOutPtr` would give 0 in all three cases. The +1 follows the
measurements and is a one-line change in `stream_fifo`.

The maximum is reset when the layer writes its profile word, so each word
holds per-inference values. It is written into `PF_W` bits (10 by default,
the ap_fixed<10,10> of the evaluated configuration) and wraps if it does not
fit; fill levels up to 63 need 6 bits.

## 2. How the profile word travels

All profile logic of a layer is in `pf_stage`, which has no state. A layer
with profile inputs `a` (and `b` for a merge) writes

```
out = { new values , elements of b , elements of a }     element 0 = LSBs
```

i.e. the first input's elements first, then the second's, then its own
measurements. Three kinds of node exist:

| node | profile inputs | profile outputs |
|------|----------------|-----------------|
| ordinary layer (dense, conv2d, relu) | 1 word of n | 1 word of n+1 |
| split (`pf_clone`) | 1 word of n | output 1: n+1 elements; output 2: one placeholder element |
| merge (`pf_add`) | words of n_a and n_b | n_a + n_b + 2 (one maximum per input FIFO) |

The placeholder is all ones (−1 as a signed 10-bit value), a value no
measurement takes, so a reader of the final word can recognise where a branch
began. Because each node's position in the word is fixed by the graph, the
label of every element can be computed when the network is built; the
example core's labels are listed in its header and in section 4.

The widths grow along the graph. This is the main resource cost of the
method: late layers copy long profile words they did not produce.

## 3. The coupling between data and profile

A profiled layer writes its profile word in the same cycle as the **last data
word of the inference**. That cycle needs the data output to have room, every
profile input to hold a word and the profile output to have room; if any is
missing, the last data word waits. This copies the extra state an HLS tool
inserts into a profiled function, whose blocking condition combines the
profile FIFOs and the data FIFO. It has a visible cost: a layer whose
profile input arrives late holds back its last pixel, and the back-pressure
changes the very fill levels being measured. The end-to-end testbench counts
these holds; in the example network they happen in every inference. A
profile stream that is decoupled from the data (a separate FSM, or profile
words forwarded directly to the end of the core) would remove this
interference; it is not what is built here.

## 4. The example network (`rinn_top`)

```
data_in -[1]- dense_in 16->36 -[1]- reshape (6,6,1) -[36]- conv1 3x3, 1->2
   -[16]- clone --o1--[36]- conv2 2->2 -[16]- relu -[16]- add.a
               \-o2-------------------------------[16]- add.b
   add -[36]- conv3 2->2 -[16]- flatten -[1]- dense_out 72->5, sigmoid -[2]- data_out
```

Numbers in brackets are FIFO depths. Those in front of a conv2d (36), an add,
clone or relu (16) and a dense layer (1) are the defaults of the generator
flow this design follows; the others are this design's choice. Dense, conv2d,
clone, relu and add layers are profiled; reshape and flatten are not, and the
profile stream goes around them.

Profile word at `pf_out_dout` (11 elements of 10 bits, element 0 in bits 9:0):

| element | content |
|--|--|
| 0 | the element the host sent in on `pf_in` (the testbench sends an inference number) |
| 1 | dense_in input FIFO maximum |
| 2 | conv1 input FIFO |
| 3 | clone input FIFO |
| 4 | conv2 input FIFO |
| 5 | relu input FIFO |
| 6 | placeholder from the clone's second output (all ones) |
| 7 | add input a (ReLU branch) |
| 8 | add input b (skip branch) |
| 9 | conv3 input FIFO |
| 10 | dense_out input FIFO |

Ports: two write-side streams (`data_in_*`, `pf_in_*`: `din`, `write`,
`full_n`) and two read-side streams (`data_out_*`, `pf_out_*`: `dout`,
`read`, `empty_n`). Write only while `full_n`, read only while `empty_n`;
assertions in every FIFO check both. Reset is synchronous, active high.

A real generated RINN has dozens of splits and merges (the evaluation this
design follows profiles 79 FIFOs in one network, and up to about 230 in
others). It needs no new kind of node: only more instances and wider profile
words. Those graphs are random and not published, so none is reproduced here.

## 5. The layers

All layers speak the same FIFO protocol, move at most one word per cycle and
hold at most one inference at a time.

* **`pf_dense`**: one word in (the whole vector), one word out. The input is
  registered on the pop; the output is offered REUSE cycles later. Products
  are summed exactly, then truncated and saturated, or passed through a hard
  sigmoid clamp(x/4 + 1/2, 0, max) for the output layer.
* **`stream_reshape`** / **`stream_flatten`**: unpack a vector word into one
  pixel per word, and pack pixels back into one vector word. Channels-last
  order, as in Keras.
* **`pf_conv2d`**: stride 1, 'same' padding (for even K one row/column more
  after than before, the Keras rule). Input pixels go into a frame buffer as
  they arrive; output pixel (r, c) leaves as soon as the last input pixel it
  needs, (min(r+PB, H−1), min(c+PB, W−1)), is stored. The layer thus runs PB
  rows and PB+1 pixels behind its input, like a line-buffer convolution, at
  one output pixel every REUSE cycles; a one-pixel result register lets the
  next pixel be computed while the previous one waits for room downstream.
  The next frame is accepted after the last output pixel of the current
  one. Because of that, its input FIFO fills while a frame drains; in the
  example conv1's maximum climbs by 8 per inference (1, 9, 17, 25, 33) until
  the 36-deep FIFO is full and reports 36.
* **`pf_clone`**: writes every pixel to both outputs in one cycle.
* **Reuse factor** (dense and conv2d, parameter `REUSE`): the products one
  output word needs are shared out over REUSE cycles on
  ceil(products/REUSE) multipliers. Lane l handles product l·REUSE + phase,
  numbered as the weight index below, and partial sums collect in one
  accumulator per output. REUSE = 1 is fully parallel. This is the knob
  that trades multipliers for time in generated layers; the assignment of
  products to lanes is this design's own.
* **`pf_relu`**, **`pf_add`**: element-wise max(0, x) and saturating sum.

Numbers are ap_fixed<2,1> (2-bit two's complement, one fractional bit) for
data and weights by default: `DATA_W`/`DATA_F` of each layer, `DW`/`DF` of
`rinn_top`, defaults from `spring_pkg`. The networks in this method are trained
only symbolically (what matters is the hardware behaviour), so weights are not
stored: `spring_pkg::weight_raw(seed, index, width)` derives each from an
integer hash,

```
h = index * 0x9E3779B1 + seed * 0x85EBCA77   (mod 2^32)
h = h ^ (h >> 15)
w = bits [width+7 : 8] of h, two's complement
```

with `index = o*N_IN + i` for a dense layer and `((o*C_IN + i)*K + kr)*K + kc`
for a convolution. Biases are zero.

## 6. How far this follows the method, and where it is its own

Taken from the method: the profile stream beside the data stream; one profile
word per inference; read-append-write at every profiled layer; the split rule
(everything to the first output, a placeholder to the second); the merge rule
(first input, then second); the FIFO fill pointer and its extraction as
`size()`; the sampling at each read and the per-inference maximum; the joint
last-data/profile write; the layer set of the example (dense, reshape,
stacked same-shape conv2d, clone, relu, add, flatten, dense with sigmoid);
the 16-element input and 5-element output; the 6×6 reshape, 3×3 kernels and
2 filters; data and profile number formats; FIFO default depths.

This design's own choices: the handshake naming and timing; the shift-register
FIFO storage and full/empty decode; the placeholder value; element 0 in the
low bits; the layer internals (how hls4ml-generated layers schedule their
reads and writes is not reproduced, so the absolute fill levels measured here
differ from those of a generated core); the weight hash; the hard sigmoid;
saturation in the add and the layers (HLS fixed point wraps by default); the
graph of the example; the depths of the vector, flatten, output and profile
FIFOs (1, 16, 2 and 2); the single element the host sends in.

One point is ambiguous in the source description: the text says a merge
writes the first input's profile data first, while the HLS output it shows
concatenates the second input into the lower bits. The text is followed.

Not modelled: the shortcuts that forward long profile words directly to the
end of the core (proposed as an optimisation, not part of the base method);
the processor, DMA and software that feed and drain the streams; the
generator that draws random graphs.

## 7. Simulating

Every file in `rtl/` is one module or package; `spring_pkg.sv` must be read
first. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/spring_pkg.sv tb/tb_rinn_top.sv --top-module tb_rinn_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_rinn_top` by any testbench below. Each prints
`TB_RESULT checks=N failures=M` and stops; each has a watchdog.

| testbench | what it checks |
|--|--|
| `tb_stream_fifo` | data, flags and `size` = occupancy against a queue, depths 5 and 1 |
| `tb_pf_relu`, `tb_pf_clone`, `tb_pf_add` | values, profile word contents, profile write with the last pixel only, random stalls everywhere |
| `tb_pf_dense` | linear and sigmoid instances and one with REUSE=7, against a fixed-point model; output no earlier than REUSE cycles after the read |
| `tb_pf_conv2d` | K=3, K=2 (even) and a REUSE=5 instance against a reference convolution; no pixel before its inputs, pixel p not before (p+1)·REUSE cycles |
| `tb_stream_reshape`, `tb_stream_flatten` | element order and frame boundaries |
| `tb_rinn_workloads` | fifteen configurations of `rinn_top`, each in its own `rinn_harness` with outputs and profile words checked as in `tb_rinn_top` (section 8) |
| `tb_rinn_top` | the whole core at default size: 10 inferences, outputs against a model of the network, every profile element against FIFO maxima the bench derives from push/pop counts; counts back-pressure, profile holds, splits, merges and host stalls and fails if any never occurs |

To change the network, edit `rinn_top`: each profiled layer takes `N_PF_IN`
(the length of the word it receives) and produces `N_PF_IN+1` (or
`N_PF_A+N_PF_B+2` for an add); the widths of the profile FIFOs follow. Layer
sizes (`X`), kernel (`K`), filters (`F`), FIFO depths, reuse factors
(`REUSE_CONV`, `REUSE_DENSE`), data format (`DW`, `DF`) and profile element
width (`PW`) are parameters of `rinn_top`. Mind the FIFO sizes when changing
sizes: the skip branch must buffer as many pixels as conv2 lags behind its
input (PB·X + PB + 1 with PB = K−1−(K−1)/2), else the add waits for a pixel
that conv2 cannot produce and the network deadlocks; with X=8, K=6 that is
28 words, more than the default 16.

## 8. What the sweeps show

`tb_rinn_workloads` runs the core at the points where the method was
evaluated by varying one factor at a time. Maxima of the last of four
inferences:

| configuration | conv1 in | conv2 in | conv3 in | add skip in | other FIFOs |
|--|--|--|--|--|--|
| 8×8×2, K=2 / 3 | 31 | 1 | 1 | 14 | 1 |
| 8×8×2, K=6 (conv 128, add 64 deep) | 64 | 1 | 1 | 32 | 1 |
| 4×4, F = 2, 5, 10 | 16 | 1 | 1 | 10 | 1 |
| 4×4×2, DW/DF = 2/1, 8/3, 16/6 | 16 | 1 | 1 | 10 | 1 |
| 6×6×2, REUSE 3 | 36 | 5 | 5 | 10 | 1 |
| 6×6×2, REUSE 18 / 36 | 36 | 7 | 7 | 9 | 1 |
| 6×6×2, profile elements of 4 bits | 9 (true 25) | 1 | 1 | 12 | 1 |

The trends agree with those reported for generated cores: larger kernels
give deeper FIFOs, filters and bit width change nothing, the reuse factor
moves some values without a clear trend, and 4-bit elements wrap while 6 bits
are enough. The absolute numbers differ, because the layer internals here are
simpler than generated ones: every layer of this design keeps pace with its
input except a conv2d at a frame boundary, so only the FIFOs in front of
conv1 and at the skip input of the add fill up, and a slower conv (high
REUSE) lets the FIFOs in front of conv2 and conv3 fill a little.
