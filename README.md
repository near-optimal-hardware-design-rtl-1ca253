# A neuron-machine CNN engine in SystemVerilog

This engine computes the convolution layers of a CNN with one idea: keep a
fixed number of multipliers busy on every clock. It does this without
buffering more than a few image rows. The chip has two parts that form a ring.

* The **memory part** holds all feature maps on chip. Every clock it emits one
  pixel position of P input maps, as a k x k x P receptive field.
* A row of **hardware neurons** (HNs) all receive that receptive field at the
  same time. Each HN computes the same position for a different output map.
  Every clock, the HNs together produce one output value for each of Q output
  maps. These values are written back into the memory part, where they become
  the next layer's input.

A layer with C input maps and F output maps of W x H pixels therefore takes
ceil(C/P) · ceil(F/Q) · W · H clocks, plus a short fill and drain. Nothing ever
stalls. Nothing is fetched from off chip during an inference, and no processor
takes part. A small table (the stage operation table) lists the layers. A
counter-based control unit walks through that table once per image.

The reference configuration is the default set of parameters. It has:

| quantity | value |
|---|---|
| multipliers | 256 |
| 3x3 layers | P = 1 input map, Q = 28 HNs (252 multipliers in use) |
| 1x1 layers | P = 16 input maps, Q = 16 HNs (all 256 in use) |
| feature-map memories (R) | 32 |
| largest map width | 300 (an SSD300 input) |
| data, weights | 8-bit two's complement |
| sums | 32-bit |

## Block structure

```
           +---------------------------- memory part ---------------------------+
 host ---> | MAU: 32 dual-port memories          receptor unit (RU)             |
           |   write barrel shifter  <--+        16 lanes, lane 0 with 3x3 rows |
           |   read selector  ---------------->  + padding mask                 |
           +----------------------------|---------------------|-----------------+
                                        |                     | k*k*P values, copied to all HNs
                                        |   +-----------------v------------------+
                                        |   | SNU  256 multipliers + 256 weight   |
                                        |   |      memories, mode input switch    |
                                        |   | DU   adder pool: 28 9-input or 16   |
                                        |   |      16-input trees, Netsum memories|
                                        +---| SU   bias, ReLU, shift, saturate    |
                       Q values / clock     +-------------------------------------+
 CU + SOT: counters, per-layer rows, the control tag that travels with the data
```

| file | block |
|---|---|
| `rtl/nm_pkg.sv` | widths, reference sizes, `sot_row_t`, `tag_t` |
| `rtl/receptor.sv` | one receptor: 3 shift rows, window taps, padding mask, k=1 bypass |
| `rtl/receptor_unit.sv` | P receptors, one per memory lane |
| `rtl/dp_ram.sv` | dual-port RAM, 1-clock synchronous read |
| `rtl/mau.sv` | memory array unit: R memories, write barrel shifter, read selector |
| `rtl/snu.sv` | synapse unit: input switch, multipliers, weight memories |
| `rtl/du.sv` | dendrite unit: switched adder pool, Netsum accumulation |
| `rtl/su.sv` | soma unit: bias, activation, re-quantisation |
| `rtl/sot.sv` | stage operation table |
| `rtl/scan_seq.sv` | x, y, input-group, output-group counter chain |
| `rtl/cu.sv` | control unit |
| `rtl/nm_top.sv` | the engine |

## The receptor: a window from a single stream

The memory part reads each map once, in raster order, one value per clock and
lane. The receptor turns this stream into the 3x3 neighbourhood of one pixel.
It has three shift rows, each W registers long. A new value enters the bottom
row, and the value leaving a row's end enters the row above. The first three
registers of each row are the nine window taps. With the rows W long, the taps
hold the neighbourhood of the pixel that entered W+1 clocks earlier.

A row has storage for 300 values, but its length is set at run time. The value
going to the next row is taken at tap W-1, so one build serves all map sizes
of a network.

**Padding mask.** At the border, some taps hold values from the previous row,
from the other side of the map, or from the previous map. A position counter
(x, y) runs behind the input, at the window's centre. It zeroes every tap
whose (x+dx, y+dy) falls outside the map. Zero padding therefore costs no
extra clocks. The next map can follow the previous one with no gap, and so
can the next layer.

**Timing.**
* The centre of pixel (0,0) is available once W+2 values have entered
  (pixel (1,1) is then at the input).
* The window is registered, so it leaves the receptor 2 clocks after the
  value that completes it.
* To push out the last W+1 windows of a layer, the control unit issues W+1
  extra "flush" reads after the last pixel.
* For k = 1 the receptor is bypassed: the input value appears at the centre
  tap, also after 2 clocks.

Only lane 0 has shift rows. The other 15 lanes are only ever used for 1x1
layers, so they have just the bypass.

## Where the maps live: the memory array unit

Output map f is written to memory f mod 32, at word address

    base + floor(f / 32) · plane + y · W_out + x,      plane = W_out · H_out

Here base is the layer's write base from the table. Reading needs P
consecutive maps c0 .. c0+P-1. These are in P neighbouring memories, all at
the same word address, so a selector rotates the 32 read ports to lane order.

Writing is harder. The Q = 28 results of one clock belong to maps f0 ..
f0+27, and these may wrap around memory 31. A barrel shifter rotates the 28
values onto the 32 write ports. Lanes that wrap past memory 31 get an address
one plane higher.

A layer reads its input at one base and writes its output at another. The
two regions must not overlap. A network ping-pongs between two regions, as
the test for SSD's first two layers does (input at 0, output at 90000, next
output at 0 again).

Each memory is dual-ported: the engine reads and writes it in the same
clock. The host can also read and write any word, which is how the input
image is loaded and the results are read back. The host should do this only
while the engine is idle; an assertion flags a host write that clashes with an
engine write.

## Sharing 256 multipliers between 3x3 and 1x1 layers

3x3 and 1x1 layers alternate in networks such as MobileNet. A 3x3 HN needs 9
products per clock; a 1x1 HN with 16 input maps needs 16. The synapse unit's
input switch wires the 256 multipliers for the current layer's mode.

| mode | multiplier 9q+j (3x3) / 16q+p (1x1) multiplies |
|---|---|
| 3x3 | tap j of lane 0's window, for q < 28 (multipliers 252..255 idle) |
| 1x1 | centre tap of lane p |

Every multiplier has its own weight memory. All weight memories are read at
one address. That address advances by one for each (output group, input
group) pair, that is, once every W·H clocks. It keeps counting through all
layers of an image.

Weight loading therefore follows this rule. For output group fg and input
group cg of a layer, each multiplier's weight goes to address

    a = (sum of ceil(C/P)·ceil(F/Q) over earlier layers) + fg·ceil(C/P) + cg

The testbenches contain a loader that follows this rule.

### One adder pool, two tree shapes

In the dendrite unit, one pool of pipelined two-input adders sums the
products. It forms 28 trees of 9 inputs in 3x3 mode, or 16 trees of 16
inputs in 1x1 mode. The adders sit in four registered levels. Each adder
input has a two-way switch, set by the mode.

* **1x1 mode.** Adder j of a level adds values 2j and 2j+1 of the level
  below. This is a plain binary tree over 16 neighbouring products.
* **3x3 mode.** A tree reduces its values 9 -> 5 -> 3 -> 2 -> 1. Adder i of
  tree q adds the tree's values 2i and 2i+1. When a level has an odd count,
  the value left over waits one level in a pass register.

| level | 1x1 adders | 3x3 adders (+ pass) | adders built |
|---|---|---|---|
| 1 | 128 | 112 (+28) | 128 |
| 2 | 64 | 56 (+28) | 64 |
| 3 | 32 | 28 (+28) | 32 |
| 4 | 16 | 28 | 28 |

That makes 252 tree adders, plus one accumulator adder per HN. In both modes
the tree of HN q ends on adder q of level 4, so the accumulator needs no
switch.

## Netsum: summing over input-map groups

When C > P, an output value needs ceil(C/P) passes over the map. Each HN
therefore has a Netsum memory with one word per output pixel.

1. The first pass writes its sums.
2. Each middle pass reads the previous partial sum, adds its own, and writes
   the result back.
3. The last pass adds its sum and sends the total on to the soma unit instead
   of writing it.

The memory has a 1-clock read. Two consecutive clocks can therefore hit the
same word. This happens with a 1x1 map of one pixel, or with the last and
first pixels of two passes. In that case a forwarding register supplies the
value just written.

For stride-2 layers only the even positions are stored, so the Netsum needs
W_out·H_out words, not W·H. The default depth, 22500, is a 150 x 150 map.

## The control tag

The control unit runs two copies of the same counter chain (x, y, input
group, output group).

* The **read scan** addresses the MAU.
* The **HN scan** starts D clocks later: D = W+4 for 3x3 and 3 for 1x1.
  This is exactly the latency from a memory read to the matching window at
  the synapse unit. The HN scan's state becomes a tag (`tag_t`) that enters
  the synapse unit together with the window.

The tag then moves through the pipeline registers beside the data. It
carries:
* a valid bit and a last bit;
* first- and last-input-group flags;
* the keep bit (for stride 2);
* the output-pixel (Netsum) address;
* the weight and bias addresses;
* the first output map and the number of real output maps in the group.

Each unit takes its addresses from the tag that arrives with its data. No
unit needs a delay count of its own. The memory write at the end of the
pipeline uses the tag's map group and pixel.

| stage | clocks |
|---|---|
| MAU read | 1 |
| receptor | 2 (+ W+1 values of fill for 3x3) |
| SNU | 2 |
| DU | 5 (4 tree levels + Netsum) |
| SU | 2 |

When the tag marked last leaves the soma unit, the control unit moves to the
next table row. It does not overlap layers. After the last row it raises
`done` and, with `auto_repeat`, starts again at row 0 for the next image.

### Table row (`sot_row_t`)

| field | meaning |
|---|---|
| `mode` | `MODE_3X3` or `MODE_1X1` |
| `stride` | 1 or 2 |
| `w`, `h` | input map size |
| `c`, `f` | numbers of input and output maps |
| `rd_base`, `wr_base` | MAU word bases of input and output |
| `shift` | right shift applied after the bias |
| `relu` | apply ReLU |
| `last` | last layer of the network |

## Soma unit

The soma unit computes `sat8(relu((sum + bias) >>> shift))`. The bias comes
from a memory per HN, addressed by output-map group, which also counts on
through the layers. The 8-bit fixed-point format (one shift per layer) is
this design's choice. Pooling is not built.

## Departures from the reference design

* **Stride 2.** The engine computes every position and keeps only even x
  and y. The result is correct, but a stride-2 layer takes four times the
  clocks of a design that skips positions. SSD300's first layer takes 540314
  clocks here, against about 135000 in the reference system.
* **Depthwise 3x3 layers are not supported.** (A depthwise layer convolves
  each map only with its own filter.) MobileNet-based networks need them for
  13 of 47 layers. The reference system runs them at ceil(C/28)·W·H clocks,
  which suggests 28 HNs each working on its own channel. How the memory part
  supplies 28 different maps to 28 HNs is not described, so no mode for it is
  built.
* **Pooling, softmax, SSD box decoding and non-maximum suppression** are not
  included. The soma-unit output stream (`hn_valid`, `hn_last`, `hn_f0`,
  `hn_nf`, `hn_opix`, `hn_data`) and the current row (`layer_idx`) are top
  ports, for such units to attach.
* **Word widths, reset, and the host ports** for the table, weights, biases
  and feature maps are this design's own.
* **No overlap between layers.** Each layer adds a fill and drain of W+14
  clocks (3x3) or 13 clocks (1x1), from the layer's start to its last output.

## Capacity at the default sizes

| resource | default | SSD300/MobileNet needs |
|---|---|---|
| MAU words per memory | 131072 | 112500 (300x300x3 input + 150x150x32 output in memory 0) |
| weight words per multiplier | 32768 | 27126 (all 3x3 and 1x1 layers) |
| bias words per HN | 1024 | 658 |
| Netsum words per HN | 22500 | 22500 (150 x 150) |
| table rows | 64 | 47 |
| map width | 300 | 300 |

So the standard and pointwise layers of that network fit. The depthwise
layers do not run. The whole engine has about 121.8 Mbit of memory, almost
all of it the 32 feature-map memories.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` at the end and stops on a watchdog if the
design hangs. Build and run a testbench with plain Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        +libext+.sv --top-module tb_nm_top rtl/nm_pkg.sv tb/tb_nm_top.sv
    ./obj_dir/Vtb_nm_top

| testbench | what it checks |
|---|---|
| `tb_receptor` | windows and padding for random sizes, back-to-back maps, both modes; exact latency |
| `tb_receptor_unit` | 16 lanes, 3x3 on lane 0, bypass on the others |
| `tb_mau` | placement f mod R, wrap of the barrel shifter, read selector, host port |
| `tb_snu` | input switch in both modes, weight addressing, 2-clock latency |
| `tb_du` | tree sums in both modes (at a reduced pool size), Netsum accumulation over several groups, forwarding, 5-clock latency |
| `tb_su` | bias, shift, ReLU on/off, saturation |
| `tb_sot` | row writes, stepping, return to row 0 |
| `tb_cu` | every read address and every tag, clock by clock, for a 3x3 stride-2 and a 1x1 layer |
| `tb_nm_top` | seven mixed layers end to end at reduced sizes, bit-exact against a direct model of the convolution formula, plus an auto-repeated second image (see below) |
| `tb_nm_full` | default sizes, unchanged: SSD300's first layer (3x3, stride 2, 300x300x3 to 150x150x32) and a 1x1 layer of 32 to 64 maps of 150x150; checks every output value and the exact number of data clocks, and prints both layers' clock counts |

`tb_nm_top` counts each mechanism and fails if one never happens:
* 3x3 and 1x1 layers;
* stride-2 discards;
* Netsum accumulation and forwarding;
* output groups with unused HNs;
* wrap of maps past memory 31;
* padded border positions;
* layers without activation;
* automatic repeat.

`tb_nm_full` takes a few minutes, mostly for compiling its 121 Mbit of memory
arrays.

To change the configuration, override the parameters of `nm_top` (map width,
memory depths, table rows). The multiplier count and the P/Q split are
constants in `nm_pkg`.
