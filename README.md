# Tiled spiking-neural-network accelerator for small FPGAs

This is SystemVerilog RTL for an accelerator that runs integrate-and-fire spiking
neural networks of any connectivity (fully connected layers, recurrent loops,
hand-wired any-to-any graphs) entirely out of on-chip block RAM. It is built
after the architecture in *A Robust, Open-Source Framework for Spiking Neural
Networks on Low-End FPGAs* (Fan and Levy). The RTL here is an independent
implementation of that architecture, not the authors' code. Where their
description stops, the choices made are listed below.

The main idea: the network's connectivity matrix is cut into 16x16 **tiles**.
Each tile holds the int8 weights from 16 presynaptic neurons to 16
postsynaptic neurons. In every timestep all tiles are streamed, one per clock,
through a single 16x16 synaptic crossbar. The crossbar multiplies the 16 spikes
of the tile's source neurons by the weights and sums each column in a pipelined
adder tree. A bank of 16 neurons adds those column sums up over all tiles that
share the same destination neurons. When the destination changes, the neurons
fire, and their new state is written back to block RAM. No work is skipped when
neurons are silent, so the run time depends only on the number of tiles:
`num_tiles + 9` clocks per timestep.

## Mapping a network onto tiles

Neurons are numbered globally and grouped into **neuron tiles** of 16:
neuron `n` is neuron `n % 16` of neuron tile `n / 16`. A **tile** is one
non-empty 16x16 block of the connectivity matrix:

| field     | bits | meaning |
|-----------|------|---------|
| `w[i][j]` | 16x16x8 | signed weight from neuron `i` of tile X to neuron `j` of tile Y |
| `x`       | 6 | source neuron tile (TILE_IDX_X) |
| `y`       | 6 | destination neuron tile (TILE_IDX_Y) |
| `out_en`  | 1 | tile Y is an output tile: record its spikes per timestep |
| `out_idx` | 2 | which of the 4 output slots tile Y uses |

The word is `tile_word_t` in `rtl/snn_pkg.sv`: 2063 bits, with the header
above the weights. Three rules apply to the list of tiles:

1. **Sort by `y`.** All tiles with the same destination must be adjacent. The
   neurons of tile Y are loaded at the first such tile and judged after the
   last one.
2. **Every neuron tile that is read must also be written.** A neuron tile is
   only updated when it appears as `y`. Input neurons have no incoming
   synapses, so each input neuron tile needs one all-zero tile with
   `x = y = that tile`. Without it the neurons never integrate their input.
3. **Output tiles** set `out_en` on all of their tiles, with one `out_idx`.

A 784-128-10 fully connected network takes 49 x 8 input-to-hidden tiles,
8 hidden-to-output tiles and 49 zero-weight tiles for the inputs. That is
449 tiles over 58 neuron tiles. The default memories hold 512 tiles and 64
neuron tiles (1024 neurons).

## What one timestep does

The control unit (`control_unit`) walks the tile memory from address 0 to
`num_tiles-1` and then sends one extra **flush** beat. Each tile passes three
stages, because the tile's indices must be known before its other data can
be addressed:

```
clock     A: tile memory read     B: header known          C: beat to crossbar
k         tile[k]                 -                        -
k+1       tile[k+1]               read spikes[prev bank][x],   -
                                  membrane[y], input[y];
                                  push weights + control into FIFOs
k+2       tile[k+2]               ...                      pop FIFOs, READY=1,
                                                           beat = spikes, weights,
                                                           tag{RESET, y, membrane, input}
k+6       ...                                              crossbar sums for tile k
                                                           leave the adder trees
k+7                                                        neuron array integrates
```

**RESET** is set on the first tile of the timestep and on every tile whose `y`
differs from the tile before it. The flush beat always carries RESET. The RESET
bit and the tile's other side data travel through the crossbar in a delay line
of the same depth as the adder trees. That is how RESET stays lined up with
the sums of the tile it belongs to.

In the neuron array (`neuron_array`), each beat does one of three things:

* **No RESET:** each neuron adds its column sum to its register.
* **RESET that starts tile Y:** this happens in a single clock. First the
  registers, which now hold the finished totals of the previous tile, are
  judged and written back:
  * the 16 spike bits go as one word to the spike memory;
  * the 16 membranes go to the membrane memory, saturated to int8 and set to
    0 where the neuron fired;
  * for an output tile, the spike word also goes to the output memory at
    `{timestep, out_idx}`.

  Then every register is loaded with `stored membrane[Y] + input[Y] + this
  beat's column sum`. Adding the first tile's sum in the load is what keeps
  one tile per clock.
* **Flush:** the last tile is written back the same way, and the registers are
  cleared. `flush_done` tells the control unit.

After the flush beat, the control unit keeps READY high and feeds bubbles until
`flush_done` comes back. Only then does it start the next timestep. This drain,
together with the three stages and the four-level crossbar, is the fixed
overhead of 9 clocks per timestep. The drain makes the timing independent of
how few tiles there are: a timestep only starts once everything from the
previous one is in memory.

**Synaptic delay.** A spike fired in timestep *t* reaches its targets in
timestep *t+1*. Spike words live in two banks selected by the timestep's
parity. Timestep *t* reads the bank written at *t-1* and writes the other one.
This holds whatever the order of the tiles, including recurrent and
backwards connections.

**Input.** The input is injected directly into the membrane: the 16 signed
int8 values of `input[Y]` are added to tile Y's neurons once per timestep.
With a constant input, a neuron's spike rate is proportional to the input, so
this acts as a rate code. A negative value acts as a bias. The host may change
the inputs between runs, even between single-timestep runs.

**Restart.** A run started with `restart` begins at timestep 0. It treats all
stored spikes and membranes as zero, instead of spending clocks clearing the
memories. A run started without `restart` continues from the stored state.
Its timestep number also continues.

## The neuron

`if_neuron` is an integrate-and-fire neuron with no leak:

```
register <= RST ? SNN_IN : register + SPK          (when a beat is present)
SPK_OUT   = register > THRESH                      (strictly greater)
MEM_OUT   = SPK_OUT ? 0 : register
```

The register is 20 bits wide. That is enough for 49 source tiles of 16
synapses at +/-127, and so for any 784-input layer. Only the stored state is
int8: membranes saturate when written back. There is one threshold for all
neurons, given on the `threshold` port.

## The crossbar

`synapse_array` gates each weight with the spike on its row
(`spike[i] ? w[i][j] : 0`). This is the product of a 0/1 spike and a weight,
so no multiplier is needed. Each of the 16 columns is summed by an
`adder_tree`: four levels of adders, each followed by a register. A tile
enters every clock, and its 12-bit column sums leave 4 clocks later. All of
these registers, and the side-data delay line, advance only while READY is
high. The paper's figure draws this as the clock ANDed with READY. It is built
here as a clock enable, so there is no gated clock. The control unit lowers
READY while the first data of a timestep are still being read, and between
runs. During those cycles the pipeline holds.

## Memories and the host interface

Everything is in simple dual-port block RAM (`bram_sdp`: one write port, one
read port with one clock of read latency, read-first).

| memory    | words x bits | written by | read by |
|-----------|--------------|-----------|---------|
| tile      | 512 x 2063   | host      | control unit |
| input     | 64 x 128     | host      | control unit |
| membrane  | 64 x 128     | neuron array | control unit |
| spike     | 128 x 16 (2 banks) | neuron array | control unit |
| output    | 512 x 16, address `{timestep[6:0], slot[1:0]}` | neuron array | host |

In the paper's system, a soft CPU sits between these ports and a host PC over
UART. Here the ports are the top's own pins. To use the accelerator:

1. Write the tiles (`tile_we/tile_waddr/tile_wdata`) and the inputs
   (`inp_we/inp_waddr/inp_wdata`).
2. Set `num_tiles`, `threshold` and `num_steps` (1 to 128).
3. Pulse `start`, together with `restart` for a fresh run.
4. Wait for the one-clock pulse on `done`. `busy` is high during the run.
5. Read the output spike words through `out_re/out_raddr`. The data appear on
   `out_rdata` one clock later.

Memory writes by the host while a run is in progress are not arbitrated.

Instead of being written through the host port, a network can be built into
the memory contents. `snn_top`'s parameters `TILE_INIT` and `INP_INIT` name
`$readmemh` files that preload the tile and input memories. Each line is one
word in hex: 516 digits for a tile, in the bit order of `tile_word_t`, with
`w[i][j]` at bits `8*(16*i+j)` and `x`, `y`, `out_en`, `out_idx` at bits
2048-2053, 2054-2059, 2060 and 2061-2062. An input word is 32 digits, with
neuron `j`'s int8 input at bits `8*j`. `tb/parity_tiles.mem` holds the two
tiles of the parity example below in this format.

## Performance

A timestep costs `num_tiles + 9` clocks. For the 784-128-10 network (449 tiles)
that is 458 clocks per timestep, or 45,801 clocks for 100 timesteps:
0.458 ms per image at 100 MHz. This was measured in simulation. The paper
reports 0.52 ms per image on its FPGA build. The 101,632 synapses of that
network occupy 449 x 256 = 114,944 synapse slots. The FPGA resource figures
the paper gives (6358 LUTs, 40.5 block RAMs for the accelerator) have not been
reproduced here. The tile memory alone is about 1.06 Mbit.

## Worked example: the parity network

`tb/tb_snn_parity.sv` runs the paper's hand-wired any-to-any network. Two
input spikes arrive on neuron 1. Neuron 16 must fire if the gap between them
is even, and stay silent if it is odd. The wiring:

* Neuron 1 drives neuron 2.
* Neuron 2 starts an oscillator between neurons 3 and 4. Once it is running,
  3 and 4 both inhibit neuron 2, so neuron 2 fires only once.
* Neuron 16 detects coincidences between neuron 1 and neuron 3.

Neuron 16 is in the second neuron tile, so the network uses two tiles
(X=0 to Y=0 and X=0 to Y=1). In integer units, with 8 counts for a weight of
1 and `threshold = 7` (so "> 7" means "reaches 1"), the values are:

| connection | weight |
|------------|--------|
| 1->2, 2->3, 3->4, 4->3 | +8 |
| 3->2, 4->2 | -8 |
| 1->16, 3->16 | +4 |

Neuron 16 also gets a constant input of -1, and neuron 1 gets an input of 8
at each spike time. The network reproduces the paper's two spike tables:

```
gap 2:  t  n1 n2 n3 n4 n16        gap 3:  t  n1 n2 n3 n4 n16
        1   1  0  0  0  0                 1   1  0  0  0  0
        2   0  1  0  0  0                 2   0  1  0  0  0
        3   1  0  1  0  0                 3   0  0  1  0  0
        4   0  0  0  1  1                 4   1  0  0  1  0
                                          5   0  0  1  0  0
```

The paper's figure gives the weights as 1, 1/2 and -1 and a bias of -1. With
neurons that do not leak, that bias would drive neuron 16 down by a whole unit
every timestep, and the coincidence at t=4 would never reach threshold. The
integer scaling and the -1/8 bias used here are this design's choice. They are
the smallest values that give the printed tables. The tables cover only the
timesteps shown: in the odd case the oscillator keeps feeding neuron 16, and
neuron 16 fires at t=6.

## What follows the paper and what was chosen here

Taken from the paper:

* 16x16 tiles sorted by destination and int8 weights.
* A crossbar whose columns are pipelined adder trees, with one tile per clock.
* The READY enable.
* A RESET raised when TILE_IDX_Y changes, carried through the array and
  through FIFOs.
* No-leak integrate-and-fire neurons with a "> THRESH" comparison, which put
  out membrane 0 when they fire.
* A 16-bit spike word and int8 stored membranes.
* An output memory addressed by timestep and output index, with at most 128
  timesteps.
* Input injected directly into the membrane.
* A synaptic delay of one timestep.
* Building the network into the block-RAM initial contents (`TILE_INIT`), as
  an alternative to writing it from the host.

Chosen here, because the paper does not say:

* The three-stage read schedule and the FIFO depths (4).
* Register-per-level adder trees: a latency of 4.
* The tile-word layout. Index widths of 6 bits (64 neuron tiles) and 9 bits
  (512 tiles). Four output slots.
* The double-banked spike memory. The flush beat and the drain between
  timesteps.
* Zero-masking on restart.
* Loading `membrane + input + first sum` on RESET.
* int8 saturation of stored membranes. A 20-bit neuron register.
* A single threshold port. A synchronous active-low reset. The host ports.

Where the paper's neuron figure and its text disagree about the membrane output
of a neuron that fires, the text (output 0) is followed. The general LIF
equations in the paper's background fire at `U >= threshold`, but its
architecture fires strictly above the threshold. The architecture is followed.

Not built: the soft CPU, the UART, and the offline training and tile
compiler. The testbenches build their tiles directly.

## Files

`rtl/`:

| file | contents |
|------|----------|
| `snn_pkg.sv` | sizes, number formats, tile word and beat tag types, int8 saturation |
| `snn_top.sv` | the accelerator: memories, control unit, crossbar, FIFO, neuron array |
| `control_unit.sv` | tile streaming, RESET and flush generation, timestep sequencing, READY |
| `synapse_array.sv` | 16x16 crossbar with the side-data delay line |
| `adder_tree.sv` | pipelined column adder tree |
| `neuron_array.sv` | 16 neurons, write-back and output-memory writes |
| `if_neuron.sv` | one integrate-and-fire neuron |
| `sync_fifo.sv` | first-word-fall-through FIFO with overflow and underflow assertions |
| `bram_sdp.sv` | simple dual-port block RAM |

`tb/` has one self-checking testbench per module (`tb_<module>.sv`), plus the
following:

* `tb_snn_top.sv`: a random six-tile recurrent network over three runs,
  checked against a reference model. It also counts that every mechanism
  happens: RESET, accumulation, flush, output writes, READY holds, spikes,
  saturation and restart.
* `tb_snn_parity.sv`: the parity example above.
* `tb_snn_meminit.sv`: the parity network booted from `tb/parity_tiles.mem`
  through `TILE_INIT`. It checks the preloaded words and the even-gap spike
  table. Run it from the directory that holds `tb/`, because the file is
  opened by that relative path.
* `tb_snn_mnist.sv`: the full-size 784-128-10 network for 100 timesteps. It
  uses pseudo-random weights and a synthetic image, because no trained weights
  ship with this RTL. It checks all 100 output words, all membranes and the run
  time.
* `snn_ref_pkg.sv`: the cycle-free reference model that the system tests use.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/snn_pkg.sv tb/snn_ref_pkg.sv \
          tb/tb_snn_mnist.sv --top-module tb_snn_mnist -Mdir obj_mnist
./obj_mnist/Vtb_snn_mnist
```

Replace `tb_snn_mnist` with any other testbench name. The full-size test runs
in well under a second. The unit testbenches need only `rtl/snn_pkg.sv` and
their own file.

## Changing the design

* **Capacity** is set in `snn_pkg`. `TILE_AW` sets the tile count, `NT_W` the
  neuron-tile count, `OUT_W` the number of output slots and `ACC_W` the neuron
  register width. The memories and ports follow.
* **Tile size** `N` must be a power of two. The number of adder-tree levels,
  and so the latency, follow from it.
* **Number formats:** `MEM_W` and `IN_W` can be widened on their own. Widening
  `W_W` also widens the column sums.
