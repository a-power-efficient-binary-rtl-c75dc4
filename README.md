# A streaming binary-weight spiking CNN: RTL of a 5-layer classifier

This is synthesizable SystemVerilog for a small convolutional spiking neural
network (SNN) accelerator whose weights are a single bit each. The whole network
lives on the chip. Each layer has its own hardware, and the layers are chained into
one pipeline. Spike maps flow through that pipeline one pixel position per clock
cycle, and no external memory is touched during inference.

The network classifies a 16 x 16 colour image into one of 6 classes. It is run for
T time steps, and in each step the image is presented as a binary spike map of
16 x 16 x 3. Five 3 x 3 convolution layers, stride 1 and no padding, reduce the map
to 6 x 6 x 6 output spikes per time step. An external decoder turns these into a
class.

| Layer  | in channels C | in size H = W | kernels K | out size X = Y | PEs (C·K·9) | neurons (K·X·Y) |
|--------|---------------|---------------|-----------|----------------|-------------|-----------------|
| Conv 1 | 3             | 16            | 16        | 14             | 432         | 3136            |
| Conv 2 | 16            | 14            | 16        | 12             | 2304        | 2304            |
| Conv 3 | 16            | 12            | 16        | 10             | 2304        | 1600            |
| Conv 4 | 16            | 10            | 16        | 8              | 2304        | 1024            |
| Conv 5 | 16            | 8             | 6         | 6              | 864         | 216             |

Three ideas make the hardware small:

* **Binary weights, binary spikes.** A product of a spike in {0,1} and a weight in
  {-1,+1} is -1, 0 or +1. It takes one AND gate, and no multiplier.
* **A fully spatial PE array per layer.** Every weight of a layer has its own
  processing element (PE), so a layer computes the whole 3 x 3 x C x K convolution
  at one output position in a single cycle.
* **A buffer chain instead of a frame buffer.** Input pixels arrive in raster
  order. A shift register just long enough to span the kernel's rows presents the
  3 x 3 neighbourhood of the current output position to the PE array. Each output
  of a layer appears in the same raster order as its input, so it can feed the
  next layer's chain directly.

## How one layer works (`layer_module`)

```
 in_spike[C] ──► buffer_chain ──window[I][J][C]──► pe_array ──wsum[K]──► neuron_block ──► out_spike[K]
 in_valid       (I-1)W+J taps                     C·J rows ×                ▲     │
                                                  K·I columns        potentials   │ new potentials
 flow_controller: row/column of the raster,                          thresholds, ▼ biases
 valid-window and address generation               local_buffer (X·Y words × K potentials)
```

### The buffer chain and the convolution window

This is the part that is hardest to see from the code. The layer receives its input
map as a stream of C-bit vectors, one per pixel, row after row (W pixels per row).
The chain is a shift register of `(I-1)·W + J` such vectors and shifts whenever
`in_valid` is high. Buffer `d` therefore holds the pixel that arrived `d` shifts
ago.

Let the newest pixel be (h, w). The pixel `(h-(I-1)+i, w-(J-1)+j)` arrived
`(I-1-i)·W + (J-1-j)` shifts earlier. So the whole I x J neighbourhood whose
bottom-right corner is (h, w) sits at fixed positions of the chain, and those
I·J buffers are wired to the PE array as `window[i][j]`. The other buffers, W-J per
gap between kernel rows, only delay the data. For the default Conv 2 shape
(W = 14, 3 x 3) the chain is 31 vectors long, and 9 of them are taps.

The window is a real output position only if it lies wholly inside the current
row band, that is when h ≥ I-1 and w ≥ J-1. When the row wraps, the taps straddle
two rows and the window is meaningless. `flow_controller` counts the raster
position and raises `win_valid` only for real windows. It also assigns output
addresses x·Y + y in order. A frame has H·W input pixels and yields X·Y outputs, and
the order of outputs is the order of the inputs. That is what lets layers be
chained with no reordering buffer.

Time steps simply follow each other. After the last pixel of one step, the next
pixel is (0, 0) of the next step. Windows that would mix the two steps are never
valid, so nothing has to be flushed between steps.

### The PE array

The array has C·J rows and K·I columns. It is split into I x J crossbar sub-arrays
of C x K PEs (`pe_crossbar`). Sub-array (i, j) holds, for every kernel k, the C
weights at kernel position (i, j), and it receives `window[i][j]`. Inside a
crossbar, spike c is broadcast along row c. Each column k is a chain of C PEs, and
each PE adds its product to the partial sum from below (`pe`).

The J crossbars of one kernel row are chained the same way. A final row of adders
adds the I chain outputs, giving

    wsum[k] = Σ_{i,j,c} W[k][c][i][j] · S[c][x+i][y+j]

with a range of ±C·I·J (±144, 9 bits signed).

A PE stores one weight bit w, with 1 for +1 and 0 for -1. The product is the 2-bit
two's-complement value `{~w & s, s}`: 00 is 0, 01 is +1 and 11 is -1. This value is
sign-extended into the adder. The whole array is combinational from the chain
registers to the neuron stage's input register.

The same array can hold other layer types:

* A fully-connected layer is a 1 x 1 kernel (`I = J = 1`).
* A depthwise convolution needs `C = K`, and each output channel may see only its
  own input channel. A ±1 weight cannot express "no contribution". So with
  `DEPTHWISE = 1` only the diagonal PEs (c = k) of each crossbar are built, and the
  other positions pass the partial sum straight through.
* Average pooling is a depthwise layer with all weights +1. With a threshold, the
  neuron turns the window count into spikes.

The 5-layer network uses plain convolutions everywhere (`DEPTHWISE = 0`). The
variants are tested on their own in `tb_layer_variants`.

### Integrate-and-fire neurons and their memory

`neuron_block` has K identical integrate-and-fire neurons that work on one output
position at a time. Neuron k keeps a potential V in `local_buffer` and does the
following:

    v     = sat(V + wsum[k] + bias[k])
    spike = v ≥ threshold[k]
    V     = spike ? sat(v − threshold[k]) : v

Here `sat()` clamps to 12-bit two's complement. Potentials are stored one memory
word per output position, holding the K potentials side by side. This makes the
memory X·Y words deep and K·12 bits wide, which is 8280 potentials over the five
layers. The memory has one read port and one write port with a registered read,
like the SRAM a chip would use.

In the first time step after `start`, the stored potentials are ignored and taken as
zero, so the memory needs no clearing. Thresholds and biases are registers with one
value per kernel, written through the configuration port. At reset the threshold is
1 and the bias 0.

### Pipeline and timing

| edge / cycle | what happens |
|---|---|
| edge 0 | the chain takes in the pixel that completes a window; the flow controller registers `win_valid` and the address |
| cycle 1 | the PE array sums (combinational); `wsum` is registered and the potential word is read |
| cycle 2 | the neurons update; the potentials are written back and the spike vector is registered |
| cycle 3 | `out_valid`, `out_spike` (and `out_last` on the last position of a time step) |

A layer adds 3 cycles of latency and accepts one vector per cycle, with no stalls
and no back-pressure. Gaps in `in_valid` are allowed and simply pass through.

A potential word is read once and written once per time step. The same address
comes back only a whole time step later, so the read-modify-write needs no
forwarding. An assertion in `local_buffer` checks this.

For the full network:

* One time step takes 256 cycles, one per input pixel.
* The last Conv 5 output of a step appears 15 cycles after the step's last input
  pixel.
* An inference of T steps therefore takes T·256 + 15 cycles.
* At 100 MHz that gives 0.0949 ms for 37 steps, 0.2306 ms for 90 and 0.5429 ms for
  212 steps. These match, to the three digits reported, the latencies published for
  this network on MNIST.

## Top level (`bwsnn_top`)

`bwsnn_top` chains the five layer modules with the shapes of the table above. It
has no parameters, because the shapes come from `bwsnn_pkg`. Its ports:

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `start` | in | 1 | begin an inference: raster counters return to (0,0), next step is the first |
| `in_valid`, `in_spike` | in | 1, 3 | input spike stream, raster order, 256 vectors per time step |
| `out_valid`, `out_spike`, `out_last` | out | 1, 6, 1 | Conv 5 spike stream, 36 vectors per time step; `out_last` on the last |
| `tap4_valid`, `tap4_spike` | out | 1, 16 | Conv 4 spike stream (64 vectors per step) |
| `sat_flag` | out | 1 | some neuron potential saturated this cycle |
| `wt_we`, `wt_layer`, `wt_addr`, `wt_data` | in | 1, 3, 8, 16 | weight write: layer 0..4, address (i·3+j)·K+k, bit c of data = weight of channel c (1 = +1) |
| `cfg_we`, `cfg_layer`, `cfg_is_bias`, `cfg_k`, `cfg_data` | in | 1, 3, 1, 4, 12 | threshold (`cfg_is_bias`=0) or bias (1) of kernel k of a layer |

Configure only while no inference is running. A weight write loads the weight
flip-flops of one kernel column for one kernel position; the whole network takes
630 such writes and 140 parameter writes.

`tap4_*` exists because the network drawing shows a second output, taken after
Conv 4 for the MNIST version of the network, without explaining it. The stream is
brought out so that an external decoder can use it. The Conv 5 output feeds an
external spike decoder, which counts spikes per class, for example. That decoder,
the input spike encoder and the platform around them are not part of this RTL.

## Files

| file | contents |
|---|---|
| `rtl/bwsnn_pkg.sv` | layer shapes, potential width, configuration port widths, width helpers |
| `rtl/pe.sv` | one PE: weight flip-flop, AND gate, adder |
| `rtl/pe_crossbar.sv` | C x K crossbar of PEs |
| `rtl/pe_array.sv` | I x J crossbars plus the adder row; addressed weight loading |
| `rtl/buffer_chain.sv` | the (I-1)W+J vector shift register and its taps |
| `rtl/flow_controller.sv` | raster position, valid windows, output addresses, first-step flag |
| `rtl/local_buffer.sv` | potential memory (1R1W, registered read) and per-kernel threshold/bias registers |
| `rtl/neuron_block.sv` | K integrate-and-fire neurons |
| `rtl/layer_module.sv` | one layer: the five blocks above and the 3-stage pipeline |
| `rtl/bwsnn_top.sv` | the 5-layer network |
| `tb/snn_ref_pkg.sv` | reference model of a layer: the convolution loop nest and the neuron rule, in plain SystemVerilog |
| `tb/tb_<module>.sv` | a self-checking testbench per module |
| `tb/tb_bwsnn_timesteps.sv` | full network for 37, 90 and 212 time steps, with latency checks |
| `tb/tb_layer_variants.sv`, `tb/layer_variant_check.sv` | depthwise, average-pooling and fully-connected layer modules against the reference model |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. Each
has a watchdog that counts a failure if it hangs. Build and run one with Verilator 5
from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bwsnn_top \
    -Irtl -Itb -y rtl -y tb rtl/bwsnn_pkg.sv tb/snn_ref_pkg.sv tb/tb_bwsnn_top.sv
./obj_dir/Vtb_bwsnn_top
```

Substitute any other `tb_*` name. The module testbenches run small, deliberately
non-square shapes (for example 3 x 2 kernels, H ≠ W), so that index mix-ups show
up. `tb_layer_module` and the two full-network testbenches compare every output
vector with `snn_ref_pkg`, which computes the layers from the convolution loop nest,
independently of the hardware's dataflow. They also check the cycle at which
outputs appear.

`tb_bwsnn_top` runs at the full size with random weights. It runs two inferences of
4 time steps, the first with random gaps in the input stream. It forces saturation
through one strongly negative bias, and it requires spikes in all five layers. Its
Verilator build takes about two minutes and the run under a second.
`tb_bwsnn_timesteps` needs about seven seconds for its 339 time steps.

To change the network, edit the shape arrays in `bwsnn_pkg`. `layer_module` takes
any C, H, W, I, J, K with W ≥ J, and the top's configuration port widths must still
cover the largest layer.

## Design choices beyond the published description

The block structure, the buffer-chain length and tap positions, the PE array
organisation, the PE's product encoding and the layer shapes follow the published
design. The following are this implementation's own choices, because the source
says nothing about them:

* **Neuron arithmetic.** 12-bit potentials, the same width for thresholds and
  biases, saturation, reset by subtracting the threshold, bias added every time
  step, no leak. The width was chosen because the chip's 12.75 KB of neuron memory
  comes to about 12.6 bits per neuron.
* **Parameters per kernel.** Thresholds and biases are held per kernel, not per
  neuron, in registers next to the potential memory.
* **Starting an inference.** Potentials are cleared logically, by a first-time-step
  flag, instead of by writing zeros to the memory.
* **Pipeline.** The split into 3 stages per layer, with no register inside the PE
  array's adder path. A deeper pipeline would change only the latency constant,
  not the 256 cycles per step.
* **Configuration.** The addressed weight and parameter write ports. The published
  design only says that weights can be changed.
* **Depthwise layers.** These are built by leaving out the off-diagonal PEs. The
  published mapping shows only the diagonal in use, and does not say how the
  unused positions are disabled.
* **Control.** `in_valid` gating (gaps allowed), the `start` input and the
  `out_last`, `sat_flag` and `tap4_*` outputs.
* **Weight encoding.** The weight flip-flop holds 1 for +1. One sentence of the
  source says the flip-flop stores "the inverse" of the weight. This RTL follows
  the product equation `{~w & s, s}` with -1 stored as 0, which the same source
  gives and its PE drawing shows (an inverting input on the AND gate).

## Not included

* **The test platform around the chip.** This is an FPGA with an image buffer, a
  spike encoder, a spike decoder, a result buffer and control logic, plus DRAM. It
  is described only by name, so the testbenches drive random spike maps instead.
* **Pads and SRAM macros.** The potential memory is a plain array with SRAM-like
  timing.
* **Skip connections and branches** (DenseNet- and Inception-style topologies).
  These are described only as ways to assemble other networks from layer modules
  and "bypass buffers", which are delay lines of spike vectors. The 5-layer network
  has neither. `buffer_chain` does bring out its oldest vector (`bypass_spike`),
  because the chain of a layer serves as the bypass path when a skip jumps over
  only that layer. It is left unconnected in the top.
* **Trained weights.** None are available, so accuracy cannot be reproduced. The
  tests check exact agreement with the reference model instead.
