# uIVIM-NET accelerator: mask-based Bayesian inference for IVIM MRI fitting

IVIM-NET fits the intravoxel incoherent motion model,
S/S0 = f·exp(−b·D*) + (1 − f)·exp(−b·D), to the diffusion MRI signal of every
voxel: a voxel is the vector of its normalised signals at n_b b-values, and
four small fully connected sub-networks estimate D, f, D* and S0 from it.
uIVIM-NET turns this into a Bayesian network with Masksembles: the dropout
layers are replaced by a few *fixed* binary masks, and every voxel is
evaluated once per mask ("sampling"). The mean of the sampled outputs is the
estimate, their spread the uncertainty.

Because the masks are fixed, the hardware needs no random numbers and no
run-time dropout: every sampling is just another set of weights, with the
dropped ones zeroed in advance. And because the weight sets are the same for
every voxel, the work can be ordered so that one set serves a whole batch of
voxels before the next is used. This RTL implements an accelerator built on
those two ideas, in SystemVerilog, for the configuration of 32 processing
elements, voxels of up to 128 b-values, 4 samplings, batches of 64 voxels and
20,000 voxels held on chip, with 16-bit fixed-point arithmetic (Q4.12).

## The network being computed

Each of the 4 sub-networks has three linear layers:

| layer | inputs | outputs | after the layer |
|---|---|---|---|
| hidden 1 | n_b | n_b | batch norm, ReLU, mask of the sampling |
| hidden 2 | n_b | n_b | batch norm, ReLU, mask of the sampling |
| encoder  | n_b | 1   | (sigmoid and conversion to D, f, D*, S0, done by the host) |

Batch normalisation is an affine map at inference time and is expected to be
folded into the weights and biases of its layer before loading. A mask drops
hidden neurons; in this design it is applied to the *inputs* of the following
layer, i.e. the weights that would read a dropped neuron are zero in that
sampling's copy. With 4 sub-networks and N_SAMP = 4 samplings there are 16
weight sets, and every voxel produces 16 encoder outputs.

The accelerator returns the encoder outputs (pre-sigmoid, Q4.12). The sigmoid,
the conversion to the IVIM parameters and mean / standard deviation over the
samplings are not in the hardware.

## Block structure

```
             host load ports                       host read port
                   |                                     ^
        +----------v-----------+                         |
        |      io_manager      |  input voxels, outputs  |
        +----------+-----------+-------------------------+
                   | chunk            ^ encoder result
              +----v----+             |
   layer_cache| router  |-------------+
   <--------->|         |---- same chunk to all PEs ----+
              +---------+                               |
                                                        v
   controller --addresses/control--> PE 0 .. PE N_PE-1:  mzs_weight_mem
                                                         -> processing_unit
                                                            (multipliers, adder tree,
                                                             accumulate, add bias)
                                                         -> ReLU, requantise
```

| file | block |
|---|---|
| `rtl/uivim_pkg.sv` | shared constants, `fix_t` (Q4.12), requantisation helper |
| `rtl/uivim_accel.sv` | top level: wires everything below |
| `rtl/controller.sv` | batch-level scheduler (state machine, all addresses) |
| `rtl/io_manager.sv` | input voxel store and output store |
| `rtl/layer_cache.sv` | two-bank intermediate layer cache |
| `rtl/router.sv` | input source selection, zero padding, result steering |
| `rtl/processing_element.sv` | one neuron: processing unit + ReLU + requantisation |
| `rtl/processing_unit.sv` | parallel multipliers, adder tree, chunk accumulation, bias |
| `rtl/adder_tree.sv` | pipelined binary adder tree |
| `rtl/mzs_weight_mem.sv` | per-PE weight/bias store with one pre-masked copy per weight set |

## How a layer is computed

Every PE computes one output neuron: the dot product of the layer's input
vector with that neuron's weight row, plus bias. All PEs receive the same
input vector (broadcast by the router) and read their own weight memory at
the same address, so N_PE neurons are computed at once. A layer of n_b
neurons therefore takes G = ceil(n_b / N_PE) *groups* (4 for 104 b-values and
32 PEs); the encoder takes one group, of which only PE 0's result is used.

A processing unit has N_MUL multipliers. If the input vector is longer than
N_MUL, the dot product is fed as C = ceil(n_b / N_MUL) *chunks* on
consecutive clocks, and the unit accumulates the chunk sums before adding
the bias. With the default N_MUL = 128 a voxel of up to 128 b-values is a
single chunk; the chunking matters for smaller builds.

The layer's results go to the intermediate layer cache: hidden layer 1 writes
bank 0, hidden layer 2 reads bank 0 and writes bank 1, the encoder reads
bank 1 and its result goes to the output store. Input positions at or beyond
n_b are forced to zero by the router, so voxels shorter than the PU need no
padding in memory, and unused cache or weight entries never matter.

### Pipeline timing

Each multiplier is followed by R_M registers, each adder of the tree and the
bias adder by R_A registers; the tree has L = ceil(log2 N_MUL) levels. A new
chunk can enter every clock. The result of a dot product of P chunks whose
first chunk enters in cycle t is valid in cycle

    t + R_M + R_A·(L + 1) + P − 1

The last chunk's tree output is added to the accumulator and the bias in the
same adder, which is why accumulation costs no extra stage. Defaults are
R_M = 3, R_A = 1, so a 128-wide single-chunk product takes 11 cycles. The
ReLU and requantisation after it are combinational.

### Arithmetic

Data, weights and biases are signed 16-bit with 12 fractional bits. Products
(Q8.24) and their sums are kept at full width (48 bits with the default
sizes), so no intermediate result overflows. The bias is aligned by a shift of
12. The neuron output is ReLU (hidden layers only), then an arithmetic shift
right by 12 (truncation toward −∞), then saturation to the 16-bit range.

## Batch-level scheduling

The controller walks the work in this nesting, outermost first:

    batch of up to BATCH voxels
      sub-network (4)
        sampling (N_SAMP)             <- one weight set selected here
          voxel in the batch
            layer (hidden 1, hidden 2, encoder)
              neuron group (G)
                chunk (C)

A weight set is selected once per (sub-network, sampling) per batch, i.e.
16 times per batch, instead of once per voxel and sampling; the `weight_loads`
output counts these selections. Each PE memory holds all 16 sets, so a
"load" is a switch of base address.

Within a layer the controller issues one read per clock (input or cache
chunk, plus weight word and bias) for all G·C chunks. The memories have a
registered read, so the PE control signals (valid, first, last, ReLU) follow
one cycle after the read. The controller then waits until all G result
groups have come back and been written, and only then starts the next layer.
Per layer this costs

    G·C + R_M + R_A·(L + 1) + 2   cycles

and per voxel and weight set the sum over the three layers. At the default
sizes and 104 b-values that is 2·(4 + 13) + 14 = 48 cycles, or 49,152 cycles
per batch of 64 voxels (49,153 measured from start to done), about 0.197 ms
at 250 MHz. Layers are not overlapped; that keeps the cache free of
read-after-write hazards at the cost of one pipeline drain per layer.

A run is started with `start` and the number of voxels `n_vox`; the last
batch may be shorter than BATCH. `done` pulses once at the end.

## Mask-zero skipping weight memory

The host writes weights in words of N_MUL values together with N_MUL mask
bits; the memory stores a weight where its bit is 1 and zero where it is 0.
So the host can load the dense trained weights of a sub-network once per
sampling with that sampling's mask, and the datapath never sees a mask. The
address of a weight word is

    ((set·3 + layer)·MAX_GROUPS + group)·MAX_CHUNKS + chunk,   set = subnet·N_SAMP + sampling

and of a bias `(set·3 + layer)·MAX_GROUPS + group`, where the group is the
one in which this PE computes the neuron (neuron = group·N_PE + PE index).
Rows of neurons beyond the layer width, and the encoder rows of PEs other
than PE 0, should be written as zeros; they are computed but never used.

Dropped weights are stored as zeros in full-size copies; the copies are not
compacted, so the compute per sampling is the same as without masks. What
is saved is the sampler and dropout logic of run-time Bayesian dropout.

## Host interface of `uivim_accel`

| group | ports | notes |
|---|---|---|
| run | `start`, `n_vox`, `n_b`, `busy`, `done` | `n_vox`, `n_b` must be stable while busy |
| statistics | `weight_loads`, `cycles` | weight-set selections and busy cycles of the last run |
| weights | `w_we`, `w_pe`, `w_waddr`, `w_wdata[N_MUL]`, `w_wmask` | one word per clock, to PE `w_pe` |
| biases | `b_we`, `b_pe`, `b_waddr`, `b_wdata` | |
| voxels | `in_we`, `in_waddr`, `in_wdata[N_MUL]` | address voxel·MAX_CHUNKS + chunk |
| results | `out_re`, `out_raddr`, `out_rdata` | address (voxel·4 + subnet)·N_SAMP + sampling, data one clock after `out_re` |

Loading must not overlap a run. Reset (`rst_n`, active low, asynchronous)
clears the control state; memory contents are not reset.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_PE` | 32 | processing elements (neurons computed in parallel) |
| `N_MUL` | 128 | multipliers per PE (chunk width) |
| `MAX_NB` | 128 | largest voxel / layer width |
| `N_SAMP` | 4 | samplings (masks) per sub-network |
| `BATCH` | 64 | voxels per batch |
| `MAX_VOX` | 20000 | voxels held in the I/O manager |
| `R_M`, `R_A` | 3, 1 | pipeline registers per multiplier / per adder |

32 PEs, 128-element voxels, 4 samplings, batch 64, 20k voxels and Q4.12
arithmetic are the reference configuration. R_M and R_A, all widths not
implied by Q4.12, the address maps, the handshakes and the two-bank cache are
this design's own choices.

## Where this design departs from, or goes beyond, the description it is based on

* **Chunk width.** The published latency model accumulates ceil(n_b / N_PE)
  parts per dot product, i.e. it ties the multiplier count of a PU to the
  number of PEs, while the same configuration is said to process voxels of up
  to 128 elements per PE. Here the chunk width is its own parameter, N_MUL,
  defaulting to 128; the latency formula holds with N_MUL in place of N_PE.
* **Storage of masked weights.** The description speaks both of storing only
  the weights that are not dropped and (in its figure) of per-sampling copies
  with zeros in the dropped positions. This design does the latter.
* **Router.** Only named in the description; its function here (source
  selection, zero padding, result steering) is this design's.
* **Layer draining, scheduling of the sub-networks inside the batch loop,
  folding of batch norm, truncating requantisation** are this design's
  choices.
* **Throughput.** The schedule gives 0.197 ms per 64-voxel batch at 250 MHz;
  the measured FPGA figure of the original work is 0.28 ms. No timing closure
  or FPGA mapping has been done for this RTL.
* **Not in the hardware:** sigmoid, conversion to IVIM parameters, mean and
  standard deviation over samplings, and the host link.

## Verification

Every block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_adder_tree` | random sums (10 inputs, R_A = 2) and the L·R_A latency |
| `tb_processing_unit` | 1-, 2-, 3-chunk dot products back to back, exact value and pipeline latency |
| `tb_processing_element` | ReLU on/off, saturation, requantisation, latency |
| `tb_mzs_weight_mem` | masked weights read as zero, others and biases as written |
| `tb_io_manager`, `tb_layer_cache`, `tb_router` | storage, banks, padding, steering |
| `tb_controller` | every read address, PE control bit and write-back target against the nested-loop order, weight-set count, run length in cycles |
| `tb_uivim_accel` | whole accelerator at N_PE = 4, N_MUL = 8, 13 b-values, 10 voxels in batches of 4: every output bit-exact against a reference model, run length, and that chunk accumulation, serial groups, padding, masked weights, ReLU clipping and a partial batch all occur |
| `tb_uivim_accel_full` | the same at the default parameters: one batch of 64 voxels of 104 b-values, 1,024 outputs |

The reference model inside the end-to-end testbenches computes the network
from the dense weights and the masks in plain integer arithmetic with the
same rounding, independently of the RTL's memory layout.

To run one with Verilator (5.x), from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/uivim_pkg.sv rtl/*.sv \
    tb/tb_uivim_accel.sv --top-module tb_uivim_accel -Mdir obj -o sim
./obj/sim
```

The full-size testbench takes about two minutes to build and ten seconds to
run. Memory contents are not reset, so a testbench must write every location
the design reads.
