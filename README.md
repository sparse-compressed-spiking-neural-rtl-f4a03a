# Sparse spiking convolution engine for object detection

Spiking networks pass binary spikes between layers, and after fine-grained pruning most
weights are zero. This accelerator exploits both. It never multiplies: one 8-bit nonzero
weight is broadcast to 576 processing elements, each covering one pixel of an 18x32
output tile. Only the elements whose shifted input pixel carries a spike add the weight.
The "multiplier" is a gate on the accumulator. Zero weights are never fetched and take no
cycle. A kernel's cost is therefore its number of nonzero weights, not its size.

The engine runs one convolution layer on one 18x32 tile per job. That covers spike
layers, the 8-bit RGB encoding layer, 3x3 or 1x1 kernels, up to 512 input and 512 output
channels, and 1 to 4 time steps. Each job ends with leaky integrate-and-fire (LIF)
neurons and an optional 2x2 max pool. An external memory controller walks the
1024x576 frame tile by tile and layer by layer.

## 1. The gated one-to-all product

A 3x3 kernel for one (output channel k, input channel c) pair is stored in two parts:

* a 9-bit **weight map**, where bit `i` is 1 when kernel position (row `i/3`, column `i%3`) is nonzero;
* the nonzero values themselves, packed one after another in the **NZ weight** store.

Each cycle the PE controller takes the lowest set bit of the current map (`map & (map-1)` clears it).
The enable map encoder turns that bit's position (R, C) into the input bit plane shifted
by (R-1, C-1). Output pixel (i, j) receives input pixel (i+R-1, j+C-1), clamped to the
tile (replicate padding). In the same cycle the NZ store is read at a running pointer.
One cycle later the weight and the 576-bit enable map reach the PE array. Every element
with a 1 in the map adds the weight to its 16-bit partial sum; the others keep their
register (the enable stands where a clock gate would be).

Thus one output channel of one time step costs `sum over c of max(nnz(k,c), 1)` cycles.
A kernel with no nonzero weight still costs one cycle, the one in which its map is found
empty. The next input plane and map are fetched while the current one is processed, so a
channel change costs nothing. 1x1 layers are kept dense: the map is not read, and every
channel has exactly one weight (which may be zero).

## 2. Tile layout in memory

A bit plane of the tile is 576 bits, held as four 144-bit words at the same address in
the four Input SRAM banks. Bank `q` holds quadrant `q = 2*(r/9) + (c/16)`, and pixel
(r, c) sits at bit `(r%9)*16 + c%16` of that word. A 2x2-pooled tile is 9x16 = 144 bits,
which is exactly one quadrant. A pooled result is written to one Output SRAM bank, chosen
in the configuration. Four neighbouring tiles pooled into banks 0..3 thus form one tile
of the next layer without any reshuffling.

## 3. Encoding layer: bit-serial multibit input

For the first layer each 8-bit RGB channel is split into 8 bit planes. The same sparse
kernels are applied to each plane. The weight is shifted left by the plane index b
before the broadcast (b = 0 is the least significant plane), so the partial sums add up
to the full-precision convolution. The NZ pointer restarts at the channel's first weight
for every plane. In this mode the 8-bit result handed to the LIF is `acc >>> 8`,
saturated. In spike layers it is the accumulator itself, saturated to 8 bits.

## 4. Neuron, time steps and output order

The LIF array holds one 8-bit membrane potential per pixel. The format is signed with 4
fraction bits: the threshold 0.5 is 8, and the 0.25 leak is an arithmetic shift by two.

    V  = sat8( (first step or spiked last step ? 0 : V >>> 2) + conv + bias[k] )
    spike = (V >= 8)

The job's loop nest is output channel k, then time step t, then bit plane b, then input
channel c.

* **Mixed time steps.** If the layer has one input time step but several output time
  steps, the convolution runs once per channel. The LIF is then stepped `OUT_T` times on
  that same result, giving different spikes each step. This is how the second layer of
  the network turns a 1-step input into 3-step output.
* **Output order.** Results are written to Output SRAM address `t*K + k`. The time steps
  of a layer are then stored channel-major, which is the order the next layer reads
  (input plane address `(t*B + b)*C + c`).

## 5. Job control and the memory-controller side

The system controller holds these configuration registers, written only while the engine
is idle:

| addr | register | meaning |
|---|---|---|
| 0 | C | input channels 1..512 |
| 1 | K | output channels of this job 1..512 |
| 2 | KS | kernel size (1 or 3) |
| 3, 4 | IN_T, OUT_T | time steps 1..4 (IN_T = OUT_T, or IN_T = 1) |
| 5 | NZ_NUM | nonzero weights the job should consume |
| 6 | FLAGS | [0] max pool, [1] encoding layer, [3:2] Output SRAM bank for pooled words |
| 7, 8 | K_BASE, NZ_BASE | first output channel, and its NZ address |
| 15 | SETUP | writing 1 starts the job |

What the memory controller does:

* **Before a job** it loads the input planes, the weight maps (address `k*C + c`), the
  packed NZ weights and the biases through the write ports. These are ignored while
  `busy` is high.
* **During a job**, if `C*IN_T*B` exceeds the 512 words of the Input SRAM, only one time
  step is kept on chip. Before every convolution pass the engine raises `in_req` with the
  step in `in_req_t`. The controller rewrites the planes at address `b*C + c` and answers
  `in_ack`. This is the only stall.
* **Large layers.** If `K*OUT_T` exceeds 512 output words, the layer is split into jobs
  of fewer output channels using `K_BASE`/`NZ_BASE`.
* **After a job**: `done` pulses, and the results are read through the Output SRAM read
  port (data one cycle after `out_re`).

Error flags:

* `cfg_err` rejects a configuration the hardware cannot run.
* `nz_err` reports that the weights consumed differ from `NZ_NUM`. That points to a bad
  weight map.

**Timing.** A pass of S cycles (section 1, times B planes) occupies the controller for
S + 6 cycles: start, S + 3 in the PE pipeline, LIF update, write. Each LIF-only repeat
for mixed time steps takes 2 cycles. The end-to-end testbench checks these counts
exactly.

## 6. Memories

| memory | organisation | role |
|---|---|---|
| Input SRAM | 4 banks x 512 x 144 b | 576-bit input planes |
| Output SRAM | 4 banks x 512 x 144 b, per-bank write enable | spikes or pooled spikes |
| Weight Map SRAM | 4 banks x 16384 x 9 b | one map per kernel |
| NZ Weight SRAM | 9 banks x 16384 x 8 b | packed nonzero weights |
| Bias RF | 512 x 8 b, registered read | one bias per output channel |

All are written as synchronous single-port arrays with one-cycle read latency. The read
data is held until the next read, and a write wins over a read. A synthesis flow would
map them to SRAM macros.

These sizes bound the layers:

* **Weight map.** It holds a 256-in x 256-out 3x3 layer.
* **NZ store.** It holds 384 x 384 dense 1x1 weights.
* **Input SRAM.** It holds 512 planes, for example 170 channels x 3 steps, so larger
  layers use the reload handshake.

## 7. What this RTL does not cover, and where it departs

* **Output convolution layer.** The network's detection head accumulates potential with
  no reset and averages it over time steps. It is not supported: the neuron always fires
  and resets.
* **Memory controller and DRAM.** They are not included. Their side of the design is the
  set of top-level ports described above. The loop over the 1024 tiles of a frame
  (32 x 32 tiles of 18x32) is theirs.
* **2x2 kernels.** They are accepted, using map positions 0, 1, 3 and 4 without a
  centring offset, but only 3x3 and 1x1 layers are tested. The network uses only those
  two sizes.
* **Design choices of this RTL.** The following are its own choices, not taken from a
  published description:
  * the fixed-point format (Q3.4) and saturation;
  * the quadrant layout and the pooled-bank select;
  * the handshake, register map, `K_BASE`/`NZ_BASE` grouping and error flags;
  * the pipeline of the PE controller;
  * an enable in place of a real clock gate in the calculation element.

## 8. Files and simulation

`rtl/`, bottom-up:

* `snn_pkg` holds the constants and the configuration struct.
* The datapath is `calc_element`, `pe_array`, `enable_map_encoder`, `lif_array` and
  `maxpool`.
* The memories are `sram_sp` (a generic array), `input_sram`, `output_sram`,
  `weight_map_sram`, `nz_weight_sram` and `bias_rf`.
* The control is `pe_controller` (one pass) and `system_controller` (a job).
* `snn_accel_top` wires them together. It has no parameters.

`tb/` has one self-checking testbench per module, plus `tb_util_pkg` with reference
helpers. Each prints `TB_RESULT checks=N failures=M`. `tb_snn_accel_top` runs the full-size
engine through eight jobs, each compared bit for bit against a reference model in the
testbench:

* the encoding layer with 1->2 time steps;
* a pooled T=2 layer with a channel offset;
* a 1->3 mixed layer;
* a 1x1 layer;
* a 200-channel T=3 layer that needs input reloads;
* a pooled T=4 layer;
* a rejected configuration;
* a job with a wrong weight count.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/snn_pkg.sv tb/tb_util_pkg.sv $(ls rtl/*.sv | grep -v snn_pkg) \
      tb/tb_snn_accel_top.sv --top-module tb_snn_accel_top -o sim
    ./obj_dir/sim

The packages are named first so that they are compiled before their users. Replace the
testbench name to run another one. The full-size end-to-end run takes about 20 seconds
of simulation after a build of about a minute.
