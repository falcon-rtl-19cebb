# NeuE: a neuromorphic engine for FALCON selective classification trees

## The idea

Many image classes share cheap features: a stop sign and a red car are both
red; a zebra and a piece of fabric are both striped. FALCON splits an n-class
classifier into a **tree of small fully connected networks (nodes)**. This
lowers the energy spent per image.

- **Initial nodes** look at the raw RGB pixels. They decide which broad feature
  group an image belongs to, such as "red", "yellow" or "striped".
- Each output neuron of an initial node enables one **final node**. The final
  node works on a short feature vector of the image, such as a colour
  histogram or a texture response, and gives the actual class.
- For one image only one initial-to-final path runs. The other final nodes
  stay idle.
- A **divergence** test protects accuracy. If the initial node cannot decide,
  a **baseline** network (one large classifier over all classes) runs
  instead. If the tree has no baseline, the answer is NOT FOUND.

Let `o_max` and `o_min` be the largest and smallest confidences over the
initial node's outputs. "Cannot decide" means `o_max - o_min < delta`.
`delta` is a run-time register, so accuracy can be traded against energy
without retraining.

A tree can have two initial nodes (for example "colour" and "texture"). The
image then goes through both, and the strongest output neuron across the two
picks the path.

The RTL in `rtl/` is the engine that runs such trees. It has these parts:

- an SRAM;
- a row of 16 multiply-accumulate **neuron units (NUs)**, each with its own
  weight FIFO and partial-sum buffer;
- a shared input FIFO with a zero-input checker;
- one piecewise-linear sigmoid **activation unit (AU)**;
- a control unit made of the control registers, a layer scheduler and the
  **selective-path activation unit (SAU)**.

The SAU holds the tree decision logic.

```
             host SRAM port              host register port
                  |                             |
          +-------v--------+           +--------v---------+
          |  SRAM 768k x16 |<--------->|  control unit    |
          +---+-------+----+           |  control_regs    |
              |       |                |  neue_ctrl (layer|
   zero_checker      weights           |   scheduler)     |
              |       |                |  sau (tree +     |
        input_fifo    +--> weight FIFO 0..15  divergence) |
              |                |       +------------------+
              v                v
      mux -> NU0 -> NU1 -> ... -> NU15 ---> AU (PWL sigmoid, LUT)
       ^      |       |             |         |
       |   T-buf0  T-buf1  ...   T-buf15      |
       +--------------------------------------+   (rotation ring)
```

## Number formats

The published description gives no bit widths. This design uses the following:

| quantity | format |
|---|---|
| pixels, features, weights, activations, `delta` | 16-bit signed Q8.8 (1.0 = 256) |
| NU sums (T-traces) | 32-bit signed Q16.16; wraps on overflow |
| SRAM | 768,000 words of 16 bits = 1500 KB, one port, one-cycle read latency |
| class labels | 8 bits |

A product of two Q8.8 numbers is already Q16.16, so the NU adds it without
shifting. The AU turns a Q16.16 sum back into a Q8.8 activation.

## How one fully connected layer is mapped

A layer has `n_in` inputs at `in_base` and `n_out` neurons.

- **Weights.** They are stored row-major at `w_base`: the weight from input
  `i` to neuron `o` is at `w_base + o*n_in + i`.
- **Outputs.** They are written to `out_base + o`, so the next layer reads them
  as its inputs.
- **Groups and blocks.** Neurons are taken in groups of 16, one neuron per NU.
  Inputs are taken in blocks of 16, which is one fill of the input FIFO.

The loop order is the heart of the engine:

```
for each input block c (16 inputs, read once into the input FIFO):
  for each neuron group g (16 neurons, one per NU):
    c == 0 : clear the NU sums
    c >  0 : restore the group's partial sums (T-traces)
             from T-buffer entry g            if g < 4
             from SRAM (two words per sum)    if g >= 4   (eviction)
    fill each NU's weight FIFO with the 16 weights of its neuron for this
      block, except those whose input is zero (data gating)
    replay the input FIFO through the NU chain; wait for the chain to drain
    last block : rotate the sums through the AU, write the activations to SRAM
    otherwise  : park the sums in T-buffer entry g, or evict them to SRAM
```

Each block of inputs is read from SRAM once. All neuron groups then use it.
Two kinds of reuse follow from this:

- **Spatial reuse.** All NUs see the same input in turn as it travels down
  the chain.
- **Temporal reuse.** The FIFO is rewound for every group instead of being
  re-read.

The price is that each neuron's partial sum must be kept between blocks.
That is the job of the **T-buffers**, one per NU and 4 entries deep. Layers
with up to 64 neurons keep every partial sum on chip. In a wider layer,
groups 4 and up **evict** their sums to SRAM at
`trace_base + 2*(g*16 + j)` (low half first) and read them back at the next
block.

### The NU chain

An input popped from the input FIFO enters NU 0. Each NU registers it and
passes it to the next NU one cycle later. An NU multiplies the input by the
head of its own weight FIFO, adds the product to its sum and pops the weight.

- The weight FIFOs hold exactly the weights of the non-zero inputs, in order,
  so inputs and weights always pair up.
- An NU with no neuron scheduled (in the last, partly filled group) is
  inactive. It neither pops nor accumulates.
- After the last input, the chain needs 16 more cycles to drain.

### Activation by rotation

NU 15 feeds the AU. A multiplexer in front of NU 0 chooses between the input
stream and the AU output. During activation every NU takes its left
neighbour's sum, and NU 0 takes the AU's result.

After 16 such **rotate** cycles, each sum has passed through the single AU
exactly once, and NU j holds the activation of its own neuron j. The
scheduler then writes the activations back to SRAM one by one. If this is the
node's last layer, it also hands them to the SAU.

### Data gating

Every word read into the input FIFO passes the **zero checker**. A zero input
has these effects:

- its 16 weights are never read from SRAM;
- it is marked in the input FIFO, so replays skip it;
- no NU spends a multiply on it.

The scheduler still leaves one time slot for each gated weight read. The
saving is in SRAM reads and MACs, which dominate energy, rather than in
cycles. The streaming phase is shorter by one cycle per zero input. Counters
report the gated inputs and the skipped weight reads.

## Piecewise-linear sigmoid

The AU uses a four-segment approximation of the sigmoid on |x|, stored as a
small table of (start, slope, intercept):

| range of abs(x) | y |
|---|---|
| 0 – 1 | 0.25·abs(x) + 0.5 |
| 1 – 2.375 | 0.125·abs(x) + 0.625 |
| 2.375 – 5 | 0.03125·abs(x) + 0.84375 |
| ≥ 5 | 1 |

For negative x, y = 1 − y(|x|). In integers, with `a = |acc|` (Q16.16):

```
a <  65536 : y = 128 + a/1024
a < 155648 : y = 160 + a/2048
a < 327680 : y = 216 + a/8192
otherwise  : y = 256         (Q8.8, capped at 256; x<0 gives 256-y)
```

The published design only says "piecewise-linear sigmoid with a LUT". The
segment values are this design's own choice.

## Tree control: SAU and divergence

Each node is described by three fields: its first layer, its number of layers
and a class base. A node's label is its class base plus the index of its
strongest output. For one input the SAU does the following:

1. Run each initial node (one or two). Track the maximum (with its index) and
   the minimum of their output activations. With two roots, the outputs of
   root 1 are numbered after those of root 0.
2. If the divergence module is enabled (`baseline_en`), compare
   `o_max - o_min` with `delta`:
   - **At least `delta`:** run `child[argmax]`. This is the final node of the
     chosen path. Only that node runs.
   - **Below `delta`:** run the baseline node if one is configured.
     Otherwise report `not_found` and stop.

   If the module is disabled, always take the final node.
3. Report `label`, `not_found`, `used_baseline` and `branch` (the index of the
   winning root output) with a `done` pulse.

The final node's inputs (the feature vector) must already be in SRAM at its
first layer's `in_base`. The colour and texture filters that produce feature
vectors are not part of the engine.

Two points are this design's own choices:

- When `o_max - o_min` equals `delta`, the final node is taken.
- Ties in the maximum keep the lower index.

## Register map

Registers are written through `cfg_we/cfg_addr/cfg_wdata` while the engine
is idle, and read back on `cfg_rdata`. All reset to 0.

| address | register |
|---|---|
| 0x000 | num_roots (1 or 2) |
| 0x001, 0x002 | root[0], root[1] (node index) |
| 0x004 | baseline node index |
| 0x005 | baseline_en: divergence module and baseline in use |
| 0x006 | delta (Q8.8) |
| 0x007 | trace_base (SRAM word address for evicted T-traces) |
| 0x010 + k | child[k]: final node for root output k (k < 8) |
| 0x100 + 8n + {0,1,2} | node n (n < 16): first_layer, num_layers, class_base |
| 0x200 + 8l + {0..4} | layer l (l < 32): in_base, n_in, n_out, w_base, out_base |

The SRAM is loaded through the `host_*` port. While the engine is busy the
controller owns the SRAM, and host accesses and register writes are ignored.

## Interface and timing of `neue_top`

| port | dir | meaning |
|---|---|---|
| clk, rst_n | in | clock; asynchronous active-low reset |
| host_re, host_we, host_addr[19:0], host_wdata[15:0] | in | SRAM access while idle |
| host_rdata[15:0] | out | SRAM read data, one cycle after host_re |
| cfg_we, cfg_addr[11:0], cfg_wdata[31:0] | in | control registers |
| cfg_rdata[31:0] | out | register read-back (combinational) |
| start | in | one-cycle pulse: classify the image now in SRAM |
| busy, done | out | busy until `done` pulses with the result |
| label[7:0], not_found, used_baseline, branch[2:0] | out | result, held until the next start |
| st_gated_inputs, st_wskip, st_tb_save, st_tb_restore, st_evict, st_mac | out | activity counters since reset |

The schedule is fully sequential. Weight fetch, streaming, activation and
write-back do not overlap. The cycle count of one node is exact and is
checked by the scheduler's testbench. Use these symbols:

- `na`: active NUs in a group;
- `cnt`: inputs in a block;
- `nz`: non-zero inputs in a block.

The count is then:

```
1 per layer
+ per input block:   1 + cnt + 2
+ per group and block:
      1                                   set-up
    + 2*na + 2        if restoring an evicted trace from SRAM
    + na*cnt + 1 (+1 if the block's last input is non-zero)   weight fetch
    + nz + 1 + 16                         stream and drain
    + 16 + na         on the last block   activate and write back
    + 2*na            on other blocks, evicted groups only
    + 1
+ 2 at the end of the node
```

Weight fetch dominates, at one SRAM read per cycle. A wider or multi-bank
weight port would be the first thing to add for speed.

## Parameters

| parameter | default | note |
|---|---|---|
| N_NU | 16 | NUs (and weight FIFOs, T-buffers); one AU |
| FIFO_DEPTH | 16 | input and weight FIFO depth |
| TBUF_DEPTH | 4 | T-buffer entries per NU |
| SRAM_WORDS | 768,000 | 1500 KB of 16-bit words |
| MAX_NODES / MAX_LAYERS | 16 / 32 | register-file size; own choice |
| MAX_ROOTS / MAX_BRANCH | 2 / 8 | initial nodes, outputs per initial-node set; own choice |

The first four are the published engine's numbers, and the design is
simulated at these defaults. The published engine was built in 45 nm at
1 GHz, with a 1 V core and 0.8 V memory, on 0.11 mm². Those figures describe
the physical implementation, not the RTL.

## Where this RTL departs from, or adds to, the published description

- **FIFO count.** The published parameter table lists "input/weight FIFO
  count 16/1". The prose and block diagram describe one input FIFO shared by
  all NUs and one dedicated weight FIFO per NU. This design follows the
  prose: 1 input FIFO and 16 weight FIFOs.
- **Weight FIFO feeding.** The block diagram draws the weight FIFOs feeding
  each other. Here they share the SRAM read bus, and a one-hot select chooses
  which one receives the word. The diagram also links the T-buffers to each
  other. Its meaning is not described, so no such path exists.
- **Own choices.** Bit widths, sigmoid segments, register map, host
  interface, the SRAM organisation, the eviction address layout, the
  sequential schedule, and the handling of ties and of `diff == delta` are
  all this design's own.
- **Gating threshold.** Gating acts on exact zeros only. One remark in the
  published results credits "near-zero" pixels for gating, but the engine
  description gates on a zero value. A threshold would make the result
  approximate and is not built.
- **No biases.** A bias can be given as an extra input fixed at 1.0 (256)
  with the bias as its weight.
- **Feature extraction.** The HSV colour and Gabor texture filters that turn
  an image into the final nodes' feature vectors are not part of the engine.
  The testbench writes feature vectors directly into SRAM.
- **Workload sizes.** Caltech-101 images are scaled to 75×50 RGB pixels
  (11,250 words) and CIFAR-10 images are 32×32 RGB (3,072 words). Both fit
  the SRAM and the 16-bit size fields. Every tree of the published
  experiments fits the register file, with at most 9 nodes and 2 initial
  nodes. Whether all weights of a given tree fit in 1500 KB depends on hidden
  sizes that are not published. For example, an 11,250-input layer fits with
  at most 67 neurons.

## Files

`rtl/`, one module or package per file:

| file | contents |
|---|---|
| falcon_pkg.sv | sizes, formats, descriptor structs |
| sram_mem.sv | SRAM |
| zero_checker.sv | zero input checker |
| input_fifo.sv | input FIFO with replay and zero skipping |
| weight_fifo.sv | per-NU weight FIFO |
| neuron_unit.sv | MAC stage |
| t_buffer.sv | per-NU partial-sum buffer |
| activation_unit.sv | PWL sigmoid |
| nu_array.sv | NU chain, weight FIFOs, T-buffers, input mux, AU ring |
| control_regs.sv | tree, node and layer registers |
| neue_ctrl.sv | layer scheduler |
| sau.sv | tree sequencer and divergence module |
| neue_top.sv | top |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`). Each
prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

`tb_neue_top` runs the whole engine at its default size on a five-node tree.
The tree includes a 40→70→2 initial node, which forces T-buffer reuse and
eviction, two final nodes, a baseline and a second initial node. It runs
several random images under four tree settings and checks every result
against an independent integer model. It also checks that each mechanism
actually occurred: path selection, divergence to the baseline, NOT FOUND,
two initial nodes, T-buffer restores, evictions and gated inputs.

`tb_workload_falcon` runs trees shaped like the two published
two-initial-node configurations on full-size images:

- **Caltech-101, 12 classes.** A colour initial node with 4 outputs, a
  texture initial node with 2 outputs, six final nodes with 2 classes each,
  and a 12-class baseline. The image is 75×50 RGB, which is 11,250 words.
- **CIFAR-10, 10 classes.** Initial nodes with 3 and 2 outputs and five final
  nodes. The image is 32×32 RGB, which is 3,072 words.

The hidden layers have 16 neurons and the feature vectors have 16 words.
Both sizes are choices of the test, since the real ones are not published.

| classification | final node runs | baseline runs |
|---|---|---|
| Caltech-101 | about 433k cycles (0.43 ms at 1 GHz) | about 650k cycles |
| CIFAR-10 | about 119k cycles | about 178k cycles |

Almost all of that time is weight fetch.

## Simulating

With Verilator 5, for example for the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal rtl/falcon_pkg.sv rtl/*.sv \
    tb/tb_neue_top.sv --top-module tb_neue_top -o sim
./obj_dir/sim
```

`falcon_pkg.sv` must come first. Any other testbench works the same way with
its own `--top-module`. The top test builds in about half a minute and runs
in about a second. For a different size, change the parameters in
`falcon_pkg.sv`. `N_NU`, `FIFO_DEPTH` and `TBUF_DEPTH` flow through the
whole design. Some testbench models (for example, which groups are evicted)
are written for the default sizes and need the same change.
