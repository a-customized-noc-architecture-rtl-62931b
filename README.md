# Domino: computing on the move in a mesh of in-memory-computing tiles

Domino is a DNN accelerator built from many computing-in-memory (CIM) crossbars. Each
crossbar sits in a tile, and the tiles form a 2-D mesh. The weights of each layer stay in
a group of tiles for good. The design centres on where the partial sums go. A CIM
crossbar gives only one slice of a convolution: one kernel position, one block of input
channels. Those slices are not gathered in a central buffer and added there. Each tile
adds the partial sum arriving from its neighbour to its own crossbar's result and passes
the total on. By the time a value leaves the last tile of a layer it is the finished
output pixel, already activated and, if the layer asks for it, pooled. The authors call
this *computing on the move*.

Each tile is driven by its own short program of 16-bit instructions in a small table.
The table is replayed with a fixed period, because a convolution sweeping an image does
the same thing every few pixels. There is no global controller and no instruction
traffic on the network.

This repository holds synthesizable SystemVerilog for the tile and the mesh, following
the Domino paper (*A Customized NoC Architecture to Enable Highly Localized
Computing-On-the-Move DNN Dataflow*). It also has self-checking testbenches that run
fully connected, convolution, pooling and skip-connection layers through the mesh. The
RTL is an independent implementation. Where the paper names a block but does not
describe its inside, the choices made here are stated below and in each file's header.

## The tile

```
            IFM mesh (E,W,N,S)                         OFM mesh (E,W,N,S)
                  |                                           |
          +-------v--------+   shortcut            +----------v-----------+
          |      RIFM      |---------------------->|         ROFM         |
          | buffer 256 B   |                       | schedule table 128x16|
          | counter, fwd   |  start + 256 B vector | counter, decoder     |
          +-------+--------+                       | in/out registers     |
                  |                                | adders, Act/Cmp/Mul/Bp|
          +-------v--------+   256 results         | buffer 16 KiB        |
          |  PE: 256x256   |---------------------->|                      |
          |  CIM crossbar  |                       +----------------------+
          +----------------+
```

* **RIFM** (`rifm`, `rifm_buffer`): the input router. It takes input-feature beats from
  one configured direction and writes them into a 256-byte shift buffer. It can forward
  each beat to any set of neighbours, so one input stream can be multicast down a chain
  of tiles. After a configured number of beats (a *step*), it starts the PE on the
  buffer contents. A step shorter than the buffer gives the paper's in-buffer shift: with
  64-byte steps the crossbar sees a window that slides by 64 bytes. When enabled, the
  RIFM also streams the buffer to the ROFM over the *shortcut*, for layers that skip the
  MAC (the identity path of a residual block).
* **PE** (`cim_pe`): the crossbar. It is a behavioural model, because the analog array is
  not part of the design (Domino takes its CIM arrays from other work). It computes, for
  each of 256 columns, the signed dot product of the 256 inputs with the column's 8-bit
  weights. It models the ADC as an arithmetic right shift by `ADC_SHIFT` (8) with
  saturation to 8 bits. It sends the 256 results to the ROFM as 16 beats.
* **ROFM** (`rofm`, with `rofm_sched`, `rofm_decoder`, `rofm_buffer`, `rofm_cu`): the
  output router. It runs the tile's program. Each instruction can:
  - receive a vector from one neighbour or from the shortcut;
  - take the PE result;
  - add or combine these with the head of the ROFM buffer;
  - apply ReLU, max, or a scaling multiply;
  - send the result to any set of neighbours and/or push it into the buffer.

The two routers have separate links, so the mesh is really two meshes. One carries input
features. The other carries partial sums, group sums and layer outputs.

## Steps and beats

The paper's tile executes one instruction per 10 MHz *step*: in that step a whole
256-value vector moves between tiles. Its peripheral circuits run at 160 MHz. This RTL
makes the relation concrete. A vector of 256 bytes moves as 16 *beats* of 16 bytes, one
beat per 160 MHz cycle. Sixteen 8-bit lanes per beat match the ROFM's adders
("8b × 8 × 2") and its two 64-bit input and output registers. Every adder, comparator and
activation unit is 16 lanes wide and is reused for all 16 beats of a step.

Data movement is data driven, with a valid/ready handshake on every link. An ROFM
executes a beat only when all of these hold:

- the beat's operands are present;
- its destination registers are free;
- the buffer has data (or room) as needed.

A tile that runs ahead simply waits, so a chain of tiles stays in step without a global
step clock. A beat passes a router in two cycles (input register, then output register).
A step with gap-free data takes 16 + 2 cycles, which is one vector per 18 cycles of
160 MHz, about 8.9 MHz. The paper assumes a fixed 10 MHz step. The difference is the cost
of the handshake registers and is the main timing departure from the paper.

## The instruction word

The field positions are those of the paper's format table. The codes inside the fields
are this design's own; the paper only names the fields.

| bits   | C-type (Opc = 0)                                  | M-type (Opc = 1)                         |
|--------|---------------------------------------------------|------------------------------------------|
| 15     | Rx: receive enable                                | same                                     |
| 14:12  | Rx: source 0 E, 1 W, 2 N, 3 S, 4 shortcut         | same                                     |
| 11     | Rx: take the PE result                            | same                                     |
| 10:7   | Sum: add {input, PE, buffer head, reserved}       | 10:8 Func: 0 Bp, 1 Add, 2 Act, 3 Cmp, 4 Mul, 5 Act+Cmp |
| 6:5    | Buffer: {push result, pop head}                   | 7:5 operand mask {input, PE, buffer}     |
| 4:1    | Tx: send to {S, N, W, E}                          | same                                     |
| 0      | 0                                                 | 1                                        |

Function details:

- **Act** is ReLU of the saturated sum.
- **Cmp** is a signed maximum.
- **Mul** multiplies the sum by the tile's 8-bit Q0.8 `mul_scale` (64 = ¼ for 2×2
  average pooling).
- **Bp** passes the received vector through unchanged.
- **Act+Cmp** applies ReLU to the new activation and takes the maximum with the buffer
  head. It is used for max pooling by block reuse.

An M-type instruction that sends nothing pushes its result into the buffer, and one that
reads the buffer pops it. All additions saturate to 8 bits. A reserved bit or an unknown
code raises `illegal`; an assertion flags it in simulation.

The schedule table holds 128 instructions. A counter steps through entries 0 to
`period`−1 and wraps. It advances when an instruction has processed all its beats.

## Mapping a layer

The hardest part of Domino is not any single block but how the instructions of
neighbouring tiles fit together. The end-to-end testbench (`tb/tb_domino_top.sv`) builds
each of the following on a 2×2 mesh and checks the results against a software model.

### Fully connected layer

The weight matrix is cut into 256×256 blocks; block (r, c) goes to the tile in mesh row r,
column c. Input slice r enters row r at the west edge, and each RIFM forwards it east, so
every tile of the row sees it. Every tile multiplies. The partial sums move south:

- the top row sends its PE result south (`rx=PE, Sum=PE, Tx=S`);
- each tile below adds the vector from the north to its own result and sends it on;
- the last row applies the activation (M-type Act).

Output slice c leaves the south edge of column c. Every tile runs a single instruction
with period 1.

### Convolution, computing on the move

Each kernel position (kr, kc) of a K×K convolution gets a tile, holding the C×M weight
slice for that position (for C, M ≤ 256). The input pixels are streamed in raster order
and forwarded through all K² tiles along a snake path, so every tile sees every pixel.
At each pixel, each tile works out whether its kernel position contributes to a valid
output pixel.

* Tiles of one kernel row form a chain: each adds its PE result to the partial sum from
  the previous tile. At the end of the row the total is a *group sum*.
* The group sum of kernel row *kr* for output row *o* is ready when input row *o + kr*
  passes, so the group sums of consecutive kernel rows for one output pixel appear one
  input row apart. A group sum therefore travels to the end tile of the next kernel row.
  It waits there in the ROFM buffer, about one image row of vectors, until that row's
  own group sum forms. The end tile adds the two (buffer head, popped) and passes the
  running total on to the end tile of the following kernel row.
* In the last tile the K-th group sum completes the accumulation, and the activation is
  applied in the same instruction. Its output is the finished pixel.

In the testbench's 2×2 case:

- kernel row 0 sits on mesh row 0 and sends its group sum south;
- kernel row 1 sits on mesh row 1, and its second tile is the last tile;
- the input pixels follow the snake 0 → 1 → 3 → 2 through the four tiles.

Each tile's schedule has two instructions per pixel:

- slot A: take the PE result, add, and send; or in the last tile, finish the pixel;
- slot B: in the last tile, receive an arriving group sum and push it into the buffer;
  elsewhere, nothing.

This is the factor 2 in the paper's period formula p = 2(P + W). Tiles whose kernel
position is outside the image at a given pixel still take the PE result and drop it, so
every PE result is consumed.

In the testbench the schedule covers a whole 3×4 frame (period 24), so the edge
columns and rows are encoded directly. The paper's shorter period of 2(P+W) per image row
relies on padding, and on the compiler masking fields for the edge cases (and for
strides other than 1). That compiler is not part of this repository.

### Pooling by block reuse

In the last tile of a layer, four successive activations are reduced in the ROFM
buffer. Max pooling chains three Act+Cmp instructions through the buffer and sends the
fourth. Average pooling adds three through the buffer and applies Mul with ¼ on the
fourth. With pooling stride S_p = 2 that is four instructions per pooling window, the
paper's period p = 2·S_p.

### Skip connection

With the RIFM shortcut enabled and the PE disabled, the input vector reaches the ROFM
directly. A Bp instruction sends it on (Func = Bp, Rx = shortcut).

## Configuration

A single write port reaches every tile: `cfg_tile` (row-major index), `cfg_sel`,
`cfg_addr` and `cfg_data`. `cfg_sel` selects one of three targets:

- `CFG_CTRL` writes the tile control register (`tile_cfg_t`). It holds:
  - the RIFM input direction;
  - the forward mask;
  - PE and shortcut enables;
  - the step length in beats;
  - the ROFM schedule period, the run bit and the Mul scale.
- `CFG_SCHED` writes schedule entry `cfg_addr` with `cfg_data[15:0]`.
- `CFG_WEIGHT` writes 16 weights: column `cfg_addr / (NC/16)`, row chunk
  `cfg_addr % (NC/16)`. Byte i of `cfg_data` is row 16·chunk + i.

Writes beyond the table or the weight array are ignored. Configuration is written before
a layer runs and stays static; a tile starts when its `run` bit is set.

## Sizes

| parameter | default | origin |
|---|---|---|
| crossbar `NC × NM` | 256 × 256 | paper (evaluation setup) |
| precision | 8-bit signed | paper |
| RIFM buffer | 256 B | paper (configuration table) |
| ROFM buffer | 16 KiB = 1024 beats | paper |
| schedule table | 128 × 16 bit | paper |
| beat | 16 lanes × 8 bit | from the paper's adder and register sizes; the slicing is this design's |
| mesh | 16 × 15 = 240 tiles | paper gives 240 CIM cores per chip; the shape is this design's |
| `ADC_SHIFT` | 8 | this design's (the ADC is not specified) |

## What is and is not here

Built: the RIFM with its buffer, forwarding, block-shift step and shortcut. The ROFM with
its schedule table, counter, decoder, buffer, adders and computation unit (Add, Act, Cmp,
Mul, Bp). A behavioural crossbar. The tile, and the mesh with its edge links.

Not built:

* **The inter-chip transceivers.** The paper uses eight 80 Gb/s wireline links taken from
  other work. The mesh-edge ports of `domino_top` are where they would attach.
* **The compiler** that turns a network into schedules and configurations. The
  testbenches contain hand-written schedules for the layers they run.

Departures from the paper:

* The step is data driven (18 cycles per vector) rather than a fixed 10 MHz tick.
* The ADC is a shift-and-saturate model.
* Act is ReLU; the paper only says "non-linear function".

Capacity at the default size: one 240-tile chip can hold VGG-11 for CIFAR-10 (about 164
tiles at one tile per kernel position and 256-channel block, without the weight
duplication the paper uses to keep layers in step). ResNet-18 for CIFAR-10 and VGG-16/19
for ImageNet need several chips. The 224-pixel-wide ImageNet layers would also need
longer schedules (2·(1+224) = 450 entries, the table has 128) and larger group-sum
buffers (about 56 KiB, the buffer has 16 KiB).

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/domino_pkg.sv rtl/*.sv tb/tb_domino_top.sv --top-module tb_domino_top -o sim
obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_rifm_buffer` | shift order and snapshot of the input buffer |
| `tb_rifm` | receive, multicast forward, steps of 4 and 16 beats, PE start, back-pressure, shortcut stream |
| `tb_cim_pe` | full 256×256 MAC and ADC model against a reference, beat order, ready |
| `tb_rofm_sched` | table writes, periodic fetch, wrap at every period |
| `tb_rofm_decoder` | C- and M-type words built field by field against the intended meaning, illegal codes |
| `tb_rofm_cu` | every function and operand mask on random operands, saturation |
| `tb_rofm_buffer` | FIFO order, offsets, full/empty, random push/pop |
| `tb_rofm` | a 9-instruction program with neighbours, PE, buffer and back-pressure; step time |
| `tb_domino_tile` | a full-size tile: weights, forwarding, PE result added to a partial sum from the north, shortcut bypass |
| `tb_domino_top` | 2×2 mesh with 32×32 crossbars: FC layer, 2×2 convolution with buffered group sums, max and average pooling, skip connection; counts stalls, forwards, pushes/pops, activations, compares, multiplies and bypasses, and fails if any never happened |
| `tb_domino_full` | the default 16×15 mesh of 256×256 tiles: a 512→512 FC layer on four corner tiles, output values and one vector per step |

The full-size mesh takes about four minutes to compile with four build jobs and about 80 seconds to simulate. It runs four 512-value vectors and finishes at cycle 16486, most of which is weight loading.

Lint notes: Verilator reports circular combinational logic on the mesh ready signals.
Ready runs backwards along the configured data path, which has no cycle in a valid
mapping; the header of `domino_top.sv` explains this. Warnings about asynchronous reset
inside assertions (`disable iff (!rst_n)`) concern only the assertions.
