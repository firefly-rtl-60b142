# FireFly-style SNN accelerator core in SystemVerilog

A spiking convolution layer is, per timestep, a matrix product between a
*binary* input (spikes) and a multi-bit weight matrix, followed by a
membrane-voltage update. Because the input is one bit, each synapse does
no multiplication: it either adds its weight or adds nothing. This core
maps that "select-and-add" onto the DSP48E2 slice of Xilinx UltraScale
devices. The slice's wide X and W input multiplexers act as the spike
switches, its FOUR12 SIMD adder adds four 12-bit partial sums at once, and
its dedicated PCIN/PCOUT cascade carries the partial sums upward through a
column of slices without touching general routing. Around this array sit a
spike-window generator, a weight delivery path that reuses each weight set
over all timesteps, and a buffer that stores partial sums and membrane
voltages in the same place.

The default build is the 144 x 16 configuration: a 3x3 window over 16
input channels (144 spikes) is multiplied by 16 output channels each
clock cycle.

## The DSP slice as a 2 x 4 crossbar (`dsp_synapse`)

One slice holds eight INT8 weights: four in its A:B register (weight row
*2k*) and four in its C register (row *2k+1*). Spike *2k* drives the X
multiplexer (A:B or zero) and spike *2k+1* drives the W multiplexer (C or
zero). Z takes PCIN, Y is zero. The spikes therefore only change OPMODE:
`{W[1:0], Z[2:0], Y[1:0], X[1:0]} = {{2{s_odd}}, 3'b001, 2'b00, {2{s_even}}}`.
Each 12-bit lane adds its two weights to the lane coming from below, with
no carry between lanes. Output column 0 sits in the most significant lane.

The module models in plain logic only the features of the slice that are
used. On a device it would be swapped for the primitive with the same
static configuration.

## Processing element and skew (`pe_chain`)

Eight slices are cascaded, giving a 16-row x 4-column crossbar per PE
whose result leaves the top of the chain. Slice *k* must see its spikes *k*
cycles after slice 0 so that it adds onto the partial sum that has just
come up. A spike vector enters all rows in the same cycle, and per-slice
delay lines provide the skew. Weight loads are skewed the same way: a new
weight set therefore takes effect exactly at the vector that requested it,
and the vectors before it finish with the old weights. PE latency is 9
cycles.

## The array (`systolic_array`, `adder_tree`)

The M x N array is (M/16) x (N/4) PEs: 9 x 4 for 144 x 16, or 288 slices.
Chains are not cascaded across PEs, because a 12-bit lane would overflow.
Instead, each PE column ends in an adder tree that sums the 9 PEs' lanes
into 16-bit partial sums. A new vector enters every cycle, and its
partial sums leave 10 cycles later.

Weights are stationary. A staging register takes the *next* weight set
while the current one is in use. The first vector of a tile (flag
`tile_first`) copies it into the slices. Until that happens the staging
register refuses further sets, and this back-pressure travels up the
weight path. A vector with `tile_first` waits until a staged set exists,
and for the 8 cycles of skewed loading after one copy.

## Spike vectors (`line_buffer`, `mlp_shift_reg`, `spike_vector_gen`)

**Convolution mode.** 16-channel spike pixels arrive in raster order. Two
row memories and a 3x3 register window produce one 144-bit window per
pixel: a 3x3 kernel with stride 1 and zero padding. Positions outside the
map are masked. After the last pixel, W+1 zero pixels are fed in
internally to flush the last row.

**MLP mode.** Nine 16-bit transfers are joined into one 144-bit vector.
A short last vector is zero padded.

`spike_vector_gen` selects the mode and walks the schedule described
below. It tags each vector with:
- its map address;
- tile start/end;
- last input tile;
- last timestep;
- first-of-group.

## Weight delivery (`weight_delivery`)

Weights arrive as a 128-bit stream, one crossbar row of 16 INT8 weights per
beat. They pass four levels:

1. **Lv1, x8 upsizer:** eight rows per entry.
2. **Lv2, partial reuse FIFO:** reuses a window of weights.
3. **Lv3, x18 upsizer:** collects one whole 144x16 set.
4. **Lv4, skid buffer:** last stage before the array.

The **partial reuse FIFO** (`partial_reuse_fifo`) is a ring buffer with
four pointers: push, pop, Start and End. The region [Start, End] holds
the c_i weight sets of one output group (L = c_i x 18 entries). When pop
reaches End, what happens depends on the pass:
- before the last pass, pop jumps back to Start;
- after T passes, the region is released: Start moves past End and End
  moves L further.

Writes may run ahead into free space but never overwrite the region in
use. The host therefore sends each weight set once, and the core replays
it for all T timesteps.

## Membrane update (`update_engine`, `psum_vmem_buffer`)

One RAM, 16 channels x 24 bits per pixel, holds a value for each pixel
that is sometimes a partial sum and sometimes a membrane voltage. A
three-phase controller decides what is done to it.

- **Acc:** v += psum.
- **Thresh:** selected at the start of a map pass for the last input tile.
  It adds the psum, applies the optional leak v − (v >>> k), fires where
  v ≥ V_th, resets firing neurons to 0, and writes the result back.
- **Clear:** used on the last tile of the last timestep. It fires as in
  Thresh and writes 0, so the next output group starts clean.

The first tile of a group treats the stored value as zero, so the RAM
needs no clearing after reset.

The update is pipelined in three stages: read, accumulate, then
leak/threshold/write. Results from the two younger stages are forwarded,
so in MLP mode, where every vector hits the same address, back-to-back
updates are correct.

## Pooling and output (`maxpool_unit`, `firefly_top`)

Output spike maps can be 2x2/stride-2 max pooled, which for spikes is an
OR. The pooling unit works as follows:
- one register holds the pair maximum of the current row;
- a W/2-entry memory holds the pair maxima of an even row until the odd
  row arrives;
- when pooling is disabled, the pixels take the bypass path.

Spikes then go to a 32-entry output FIFO. When it holds 28 or more, a
global enable freezes:
- the array;
- the update pipeline;
- vector issue.

## Schedule and host protocol

One layer is one call with a `cfg_t` configuration:
- mode;
- H, W;
- c_i and c_o, in 16-channel tiles;
- T;
- leak enable and shift;
- V_th;
- pooling.

The loop order is c_o > T > c_i > map position.

For each output group:
- the host streams c_i weight sets once;
- for each timestep it streams the c_i input tiles, each a whole map of
  16-channel spike pixels (or one 144-spike slice in MLP mode);
- during the last input tile of each timestep the core emits that
  timestep's output spikes (`o_last` marks the end of a layer).

`start` latches the configuration, `busy` and `done` report progress, and
all three streams use valid/ready.

The DMA engines, DRAM and host processor of the full system are outside
this core. Their streams are the top's ports.

## Choices this design makes where the source is silent or loose

| Topic | Choice in this design |
|---|---|
| Firing test | v ≥ V_th (the model equation). The pseudo-code's strict > was not followed. |
| Leak | A shift, v − (v >>> k). |
| PRF labels | End is inclusive. The next region starts at End+1. |
| Lv3 upsizer | x18, so one output word is a full weight set. The x8 in the drawing is taken as illustrative. |
| Widths | Psum 16 bits, Vmem 24 bits. |
| Map size | Buffer of 2304 pixels (48x48) and maps at most 64 wide. |
| Weight layout in a set | Row r = (kh·3+kw)·16 + channel, column = output channel. |
| Adder tree | One combinational level plus a register. |
| Stall | A global output-FIFO stall. It is not described in the source. |

Known limits:
- Only 3x3/stride 1 convolution and 2x2 pooling.
- Input encoding of the first layer is not included: the input must
  already be spikes, padded to 16 channels.
- A fully connected layer with more than 56 input tiles (8064 inputs) does
  not fit the reuse FIFO. This excludes the final classifier of the larger
  benchmark networks unless it is split or the FIFO is made deeper
  (`PRF_DEPTH`).
- The dual-array configuration is not provided.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl rtl/firefly_pkg.sv \
    $(ls rtl/*.sv | grep -v firefly_pkg) tb/tb_firefly_top.sv --top-module tb_firefly_top
./obj_dir/Vtb_firefly_top
```

`tb_firefly_top` runs the default 144x16 core through two layers and
compares every output spike with a model written in the testbench. The
two layers are:
- a 4x6 convolution, 32→32 channels, T=3, leak and pooling on;
- an MLP 288→16, T=2.

The testbench also counts these events, and each must occur:
- weight replays and region releases;
- weight back-pressure and output back-pressure;
- pooling and bypass;
- the Thresh and Clear phases;
- MLP vectors.

Unit testbenches exist for:
- the slice, the PE and the adder tree;
- the array, which checks the 10-cycle latency, one vector per cycle, and
  weight-set switching;
- the line buffer, the shift register and the upsizer;
- the reuse FIFO, the skid buffer, the buffer RAM and the pooling unit.
