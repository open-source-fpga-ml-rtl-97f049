# A streaming dataflow accelerator for tiny neural networks

This is RTL for a small FPGA accelerator of the kind that the hls4ml and FINN
flows produce for the MLPerf Tiny benchmarks. Each network layer is its own
hardware stage. The stages run at the same time and pass activations to each
other through FIFOs, so one input vector moves through the network as a wave.
Around the network sit three things:

- an AXI4-Lite register block, through which a host CPU starts a run;
- an AXI4 read master that fetches the input array from memory;
- an AXI4 write master that stores the result.

Two network cores are provided. One is picked at build time by the top-level
parameter `MODEL`:

| `MODEL` | Task | Network | Arithmetic |
|---|---|---|---|
| `MODEL_KWS` (default) | keyword spotting | FINN-style MLP 490 → 256 → 256 → 256 → 12, then an argmax node | 3-bit weights and activations, 8-bit input |
| `MODEL_AD` | anomaly detection | hls4ml-style dense autoencoder 128 → 72 → 72 → 8 → 72 → 72 → 128, reuse factor 144 | 6-bit weights, 12-bit activations |

The image-classification CNNs of the same benchmark suite are **not**
implemented. They need convolution window generators and pooling units, and
this design has neither.

## Data path of one inference

```
 host ──AXI-Lite──> ctrl_regs ──start──┬──────────────────────────────┐
                        ^ done         v                              v
 memory ──AXI4 R──> axi_read_mover ─> stream_fifo ─> core ─> stream_fifo ─> axi_write_mover ──AXI4 W──> memory
                                    (local input)          (local output)
```

1. The host writes the input and output array addresses to the registers,
   then sets `start`.
2. `ctrl_regs` issues a one-cycle `core_start`. Both movers latch their
   addresses.
3. The read mover fetches the input array in INCR bursts. Each burst is at
   most 16 beats and never crosses a 4 KiB boundary.
4. The read mover unpacks the 64-bit beats into network input words.
5. The core computes. The write mover packs the result into beats, writes
   them, and waits for every write response.
6. The last write response ends the run. `done` is then set in CTRL, and the
   run's cycle count is latched.

### Input and output format

Input elements in memory are 16-bit unsigned fixed point with 8 integer and
8 fraction bits. The read mover keeps the 8 integer bits, which are the
network's 8-bit input; for the keyword-spotting model those are the
quantized MFCC features.

The result is stored as 16-bit elements:

- KWS: a single element holding the class index.
- AD: 128 sign-extended 12-bit reconstruction values, with 8 fraction bits.

The anomaly score is the mean squared error between the input and its
reconstruction. The host computes it.

### Register map (`ctrl_regs`, byte offsets)

| Offset | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | bit 0 `start` (write 1), bit 1 `done` (cleared when CTRL is read), bit 2 `idle`, bit 3 `ready` |
| 0x10 | IN | byte address of the input array |
| 0x18 | OUT | byte address of the output array |
| 0x20 | CYCLES | clock cycles from start to done of the last run (read only) |
| 0x24 | STATUS | bit 0: read error response; bit 1: write error response (read only, cleared by start) |

The layout copies the usual HLS block-level control protocol. The CYCLES and
STATUS registers were added by this design.

### Loading the network parameters

Weights, thresholds and biases are written through a simple side port. The
port has a write strobe, a layer number, a kind, an index and a value:

| Port | Meaning |
|---|---|
| `cfg_we` | write strobe |
| `cfg_layer` | layer number |
| `cfg_sel` | kind: 0 weight, 1 threshold, 2 bias |
| `cfg_addr` | index |
| `cfg_data` | value |

Indexing:

- KWS layer L weight: `row*MW + col`.
- KWS threshold: `neuron*7 + t`. Thresholds must be ascending per neuron.
- AD weight: `in*N_OUT + out`.
- AD bias: `out`.

The generated accelerators this design follows bake their parameters into the
bitstream. Here they are RAM contents instead, written before the first run
and left alone while a run is in progress.

## The keyword-spotting core (`kws_mlp`)

The core is four `mvau` stages, each followed by a depth-32 FIFO, and then a
`topk` node.

An `mvau` (matrix-vector-activation unit) holds its weight matrix split over
PE processing elements. Each PE holds every PE-th row of the matrix, and in
each cycle it multiplies SIMD weights by SIMD inputs. The unit works in three
steps:

1. It collects the whole input vector in a buffer.
2. It runs NF = MH/PE neuron folds. Each fold takes SF = MW/SIMD cycles,
   after which PE results leave as one word.
3. Each result goes through a multithreshold activation: the output is the
   number of the 7 per-neuron thresholds that the accumulator reaches.

In step 3, batch-norm and ReLU have already been folded into those
thresholds, so the thresholds alone give a 3-bit activation. The output
layer skips step 3. It emits raw accumulators, and `topk` returns the index
of the largest one, with the lowest index winning ties.

| Layer | MW × MH | SIMD × PE | Cycles per vector |
|---|---|---|---|
| fc1 | 490 × 256 | 10 × 32 | 49 load + 8 × 50 |
| fc2 | 256 × 256 | 16 × 16 | 16 + 16 × 17 |
| fc3 | 256 × 256 | 16 × 16 | 16 + 16 × 17 |
| fc4 | 256 × 12 | 16 × 4 | 16 + 3 × 17 |

The folding was chosen here; the published design's folding is unknown. The
first layer is the bottleneck. An isolated inference takes about 1,670 cycles
from start to done, memory stalls included.

## The anomaly-detection core (`ad_autoencoder`)

The core is six `dense_rf` layers with depth-1 FIFOs between them.

A `dense_rf` layer with N_IN inputs, N_OUT outputs and reuse factor RF has
N_IN·N_OUT/RF multipliers. Each multiplier is used RF times per vector.
Multiplier m handles the flat weight indices k = m·RF … m·RF+RF−1, where
k = in·N_OUT + out. The multiplier walks its (in, out) pair with two
counters and adds its product into accumulator `out`. Several multipliers
may hit the same accumulator in one cycle; their products are summed.

Each accumulator starts at the bias, aligned to the product format. After RF
cycles the layer does three things:

- shifts the sum right by the 4 weight fraction bits (rounding toward minus
  infinity);
- applies ReLU, except in the last layer;
- saturates to 12 bits.

The whole layer takes RF+1 cycles. With RF = 144 the six layers have
64 + 36 + 4 + 4 + 36 + 64 = 208 multipliers.

## Where this departs from, or goes beyond, the published description

- **KWS output width.** The text describes a 10-neuron output layer. The
  parameter count (259,584) and the 12-class dataset both call for 12. This
  design uses 12.
- **KWS widths.** The input width 490 and hidden width 256 were worked back
  from the parameter count.
- **AD bottleneck.** The bottleneck width of 8 is an assumption. The
  resulting autoencoder has 30,376 weights and biases, against 22,285
  reported for the published one.
- **AD number formats.** The formats are assumptions within the reported
  "6 to 12 bit" range. They are: 8-bit unsigned input, 12-bit activations
  with 8 fraction bits, 6-bit weights with 4 fraction bits, and 12-bit biases.
- **Assumed interfaces and sizes.** These were all chosen here:
  - bus width 64 bits, bursts of 16 beats;
  - local buffers of 2 words;
  - the register map;
  - the valid/ready handshakes;
  - asynchronous active-low reset.
- **FIFO high-water marks.** The FIFOs report these on the `fifo_max` output.
  The generated designs size each FIFO from its peak occupancy, and these
  outputs make that peak visible. The sizing itself is a build-time step and
  is not part of the RTL.
- **Not included.** The processor system or soft CPU, the AXI interconnect,
  the DDR controller and memory, the UART, and the energy-measurement setup.
  The accelerator's AXI ports are where these would connect.

## Testbenches

Each `tb/tb_<block>.sv` is self-checking. It computes the expected result
independently, with its own reference model, and ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_stream_fifo` | random push/pop against a queue, depths 1 and 3, high-water mark |
| `tb_multithreshold` | random accumulators and thresholds against a count |
| `tb_topk` | random logits, ties, back-pressure |
| `tb_mvau` | random matrices against a reference; checks the period NL + NF·(SF+1) |
| `tb_dense_rf` | bit-exact fixed point, latency RF+1, saturation and ReLU |
| `tb_ctrl_regs` | register access, start/done/idle, clear-on-read, cycle counter |
| `tb_axi_read_mover` / `tb_axi_write_mover` | against a stalling memory model: burst splitting at 4 KiB, partial last beats, element unpacking |
| `tb_kws_mlp` | reduced network (20-8-8-8-4) against a reference, 40 vectors back to back |
| `tb_ad_autoencoder` | reduced network (8-6-6-2-6-6-8, RF 12), bit-exact, 30 vectors |
| `tb_ml_accelerator` | the full-size default top (KWS) end to end (see below) |
| `tb_ml_accelerator_ad` | the top built with `MODEL_AD`, full size: two inferences, all 128 outputs bit-exact, stalls and back-pressure on both buses |

`tb_ml_accelerator` loads all 259,584 weights and runs three inferences
through AXI-Lite and a memory that stalls at random. The first input array
straddles a 4 KiB boundary. The test counts each mechanism and fails if one
never occurs:

- memory stalls;
- the 4 KiB burst split;
- read back-pressure;
- done clearing when CTRL is read;
- idle being set;
- the cycle counter;
- use of every FIFO;
- output bytes beyond the result left untouched.

`tb/axi_mem_model.sv` is a behavioural AXI4 memory with a settable
stall rate. It counts bursts, stalls and any 4 KiB violations.

To run the top-level test with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/tinyml_pkg.sv tb/tb_ml_accelerator.sv \
          --top-module tb_ml_accelerator -j 8
./obj_dir/Vtb_ml_accelerator
```

The other testbenches run the same way, each with its own module name. Both
configurations of the top have been simulated at full size: an inference takes
about 1,670 cycles for KWS and about 1,220 cycles for AD, memory stalls
included.
