# A Bayesian binary spiking-network accelerator

A Bayesian neural network does not have one weight per synapse: it has a
probability distribution. Here each weight is Bernoulli distributed: it is
+1 with probability p and -1 with probability 1-p. A prediction is made by
drawing several concrete networks from these distributions (Monte-Carlo
samples) and combining their outputs, which gives better-calibrated
confidence than a single network. This accelerator runs such networks as
spiking networks (SNNs), where activations are binary spikes spread over a
few timesteps. Three ideas keep the hardware small:

* **Ensembles in time.** One physical network is re-sampled for each
  Monte-Carlo sample, instead of building n_MC copies. Sampling happens on
  the way into the weight memory: each clock, 64 Bernoulli parameters arrive
  from the host. They are compared with 64 fresh random numbers, and the 64
  resulting +/-1 weights are stored.
* **Cheap random numbers.** The 64 random numbers per clock come from only 16
  32-bit LFSRs, because every byte of every LFSR is used.
* **No multipliers in the convolution.** A spike is 0 or 1 and a weight is
  +/-1, so every product is 0, +1 or -1. Each multiplier becomes a 2:1
  multiplexer on a two-bit code.

The design is the programmable-logic half of a processor + FPGA system. The
host processor slides the convolution window over the image, streams
parameters and spikes, loops over timesteps and samples, and turns the
accumulated output spikes into class probabilities (softmax). The logic here
does the sampling, the convolution, the batch normalisation and the
integrate-and-fire neurons.

```
 host ──► controller ───────────────────────────────────────────┐
   │  p (64 x 8 bit)                                            │
   └──► prng_unit ──► bernoulli_sampler ──► weight_memory ──┐   │
   │  spikes                                 (3 banks)      ▼   ▼
   └──► input_spike_buffer ──────────────────────────► spiking_core (64 PEs)
                                                            │ 64 sums
                                                       temp_buffer
                                                            │ 4 per clock
        neuron_state_memory (64 kB) ◄──► aggregation_core (4 neurons: BN + IF)
                                                            │
                                                     64 output spikes ──► host
```

## One pass: from a receptive field to 64 output spikes

The unit of work is a **pass**. A pass computes 64 filters (3x3 kernels over
`n_cin` input channels) at one output position. It then updates the 64
neurons that belong to those filters at that position.

**Rows.** Everything is organised by *filter row*. Row number
`row = c*3 + ky` covers input channel `c` and kernel row `ky`. A row holds
three kernel columns, `kx = 0, 1, 2`. A filter with `n_cin` channels has
`3*n_cin` rows.

* `input_spike_buffer` holds the receptive field: three spike bits per row,
  where bit `kx` is column `kx`. The host writes it before each pass.
* `weight_memory` holds the sampled weights in three banks, one per `kx`.
  The word at `row` in bank `kx` holds the weights of all 64 filters at that
  kernel position. This split lets the sampler write one kernel position
  (64 weights) per clock. It also lets a pass read a whole row for all 64
  filters (3 x 64 weights) per clock.

**Convolution.** The controller reads rows 0 to `3*n_cin-1`, one per clock.
The two memories answer one clock later. All 64 PEs then see the same three
spikes, and each PE sees its own filter's three weights. One PE
(`pe.sv`) has three multiplexers. Each multiplexer passes its weight when its
spike is 1 and 0 when it is not. An adder adds the three results to the PE's
own running sum. So a 3x3 kernel takes 3 clocks per input channel, and a
512-channel filter takes 1536 clocks.

**Neurons.** When the last row has been added, the 64 sums are copied into
`temp_buffer`. The `aggregation_core` then takes the sums four at a time
through four neuron units, so 64 sums take 16 clocks. For each sum it reads
the neuron's stored membrane potential U and does three steps:

1. Batch norm with two per-filter coefficients:
   `v = ((a * sum) >>> 4) + b`. Here `a` and `b` are 8-bit signed, and `a`
   has 4 fractional bits.
2. Integration: `U' = sat8(U + v)`. At the first timestep of a new input,
   the old U is treated as 0.
3. Firing: if `U' >= theta`, the neuron spikes and `theta` is subtracted from
   U' (reset by subtraction). Otherwise U' is kept as it is.

U' is written back, and the 64 spike bits go to the `spikes` output.

**Pass timing.** Count from the clock edge that samples `run` to the edge
after which `done` is high. The count is `3*n_cin + 21` clocks:

| clocks | what happens |
|---|---|
| `3*n_cin` | row reads (the PEs lag by one clock) |
| 3 | last accumulation, flush, copy into the temporary buffer |
| 17 | aggregation: 16 read clocks, 1 write clock, and the done register |
| 1 | controller `done` register |

A pass with 512 channels takes 1557 clocks. The convolution phase and the
neuron phase do not overlap: the next `run` is accepted only once `busy` has
fallen.

## The random number bank and the sampler

`prng_unit` has 16 Galois LFSRs. Each uses the maximal-length polynomial
x^32 + x^22 + x^2 + x + 1 (shift right; feedback mask `32'h80200003`).
Random number `4*i + b` is byte `b` of LFSR `i`. The LFSRs step only on
clocks where the host writes Bernoulli parameters. So for a given seed the
whole sequence of sampled networks can be reproduced, whatever the host does
between writes. Reset loads LFSR `i` with `32'hACE12468 ^ (i * 32'h9E3779B9)`.
The host can load any LFSR with its own seed; a seed of zero is replaced by 1.

Using adjacent bytes of one register means neighbouring random numbers are
correlated: apart from the feedback taps, a byte is a copy of its
neighbour from eight steps earlier. The published evaluation of this
architecture found that this costs little accuracy on CIFAR-10: 89.41% with
full reuse against 89.64% with one byte per LFSR.

`bernoulli_sampler` has 64 comparators. Weight `i` is +1 when `p[i] > r[i]`,
otherwise -1. So P(w = +1) = p/256 for an 8-bit parameter p. In hardware,
p = 0 never gives +1, and p = 255 gives +1 with probability 255/256. The
sampler is combinational, so 64 weights are sampled and stored in the same
clock as the host's write. Weights use the two-bit signed code that the PEs
add directly: `2'b01` = +1, `2'b11` = -1, `2'b00` = 0 (the spike was 0).

## The neuron state memory

The 64 kB store holds 65536 eight-bit potentials. That is exactly one
64-channel 32x32 feature map, the largest in a CIFAR-10 ResNet-18. It has
four banks, one per neuron unit. Neuron `n` is in bank `n mod 4` at word
`n / 4`. In a pass, filter `f` updates neuron `nbase + f`, where `nbase` is
a multiple of 4 given with `run`. The host chooses the numbering, for example
`nbase = 64 * (output position) + 64 * positions * (filter group)`, so that
all neurons of a layer fit. A layer's potentials must stay in the store for
all T timesteps. The host therefore runs one layer for every timestep before
it moves to the next layer.

## Running a Bayesian layer (host procedure)

```
load BN coefficients (a, b) of the 64 filters           bn_we / bn_idx / bn_coef
for mc in 0 .. n_MC-1:                                   # one network sample
    for every row, kx: write 64 parameters p             p_we / p_row / p_kx / p
    for t in 0 .. T-1:
        for every output position:
            write the receptive field's spike rows       spk_we / spk_row / spk_data
            pulse run (n_cin, nbase, first = (t == 0), theta)
            wait for done; read spikes; add them to the per-class counts
softmax over the counts (on the host)
```

Two rules apply. The host must not write parameters or spikes while `busy`
is high; an assertion checks this. A `run` pulse while busy is ignored.
Layers with more than 64 filters are run as several 64-filter groups, each
with its own parameter stream, BN coefficients and `nbase` range. Streaming
parameters draws a new sample of the weights. So within one Monte-Carlo
sample, a group is streamed once and then run for all T timesteps before the
next group (or layer) is streamed. In a deeper network, the loop over layers
and groups sits inside the loop over samples. The output spike maps of one
layer, kept by the host for every timestep, are the input of the next layer. A 1x1
convolution can be run as a 3x3 one with only the centre spike set.

## Sizes

| parameter | value | origin |
|---|---|---|
| PEs / filters in parallel | 64 | paper |
| LFSRs x width, bytes used | 16 x 32 bit, 4 | paper |
| Bernoulli parameter, random number | 8 bit | paper |
| neuron units | 4 | paper |
| neuron state memory | 64 kB, 8-bit potentials | size from the paper; 8 bits from its 8-bit model |
| kernel | 3x3, one row of 3 per clock | paper |
| largest input-channel count | 512 (4608 kernel positions) | chosen: ResNet-18's widest layer |
| PE accumulator | 16 bit signed | chosen: holds +/-4608 |
| BN coefficients | 8-bit a (4 fractional bits), 8-bit b | chosen |
| threshold | 8-bit, one per pass | chosen |

In total the design holds 1,118,720 memory bits: weights 589,824, neuron
states 524,288 and spikes 4,608. It also has about 3,800 flip-flops. There
are four multipliers, one 8 x 16 bit multiplier in each neuron unit.

## Where this design follows its source and where it does not

Taken from the source design:
* the block structure (control, PRNG, on-chip memory, spiking core with 64
  PEs, aggregation core with BN and activation);
* the LFSR bank with full byte reuse (16 x 4 = 64 numbers per clock);
* the comparator sampler;
* the two-bit weight/product code;
* the multiplexer PEs, one filter row per clock;
* two-parameter BN;
* IF neurons with reset by subtraction;
* four shared neurons;
* the 64 kB state memory.

Choices made here, where the source does not say:
* the LFSR polynomial and seeds;
* the memory organisation (row banks; sampling on the way into the weight
  memory);
* the fixed-point BN formula and saturation;
* spiking when `U >= theta`;
* the `first` flag that restarts neurons;
* the pass schedule, latencies and the host protocol;
* all widths not listed above as taken from the source.

Differences and open points:
* **PE rate.** The source states both that a PE "processes three rows of a
  filter" per clock and that a 3x3 filter takes 3 clocks. Its PE drawing has
  three multiplexers. This design does one row (three multiply-accumulates)
  per PE per clock, which matches the 3-clock figure.
* **Peak throughput.** 64 PEs x 3 MACs is 384 operations per clock, or
  36.1 GOPS at the source's 94 MHz. The source reports 42.1 GOPS and does not
  say how it counts operations.
* **FPGA resources.** The source's FPGA build uses 6 DSP slices and 47 block
  RAMs. This design has 4 multipliers and about 31 block RAMs of memory bits,
  so the two builds cannot match exactly.
* **Overlap.** There is no overlap between the convolution of one pass and
  the neuron update of the previous one, although the temporary buffer would
  allow it.
* **Outside the logic.** The following are not in this logic and are left to
  the host, as in the source: the real-valued input encoder layer, residual
  additions, pooling, the classifier layer, spike-count accumulation and
  softmax.
* **Host link.** The processor and its bus or DMA link are not part of the
  RTL. The top level's ports are plain strobed signals that a bus adapter
  would drive.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block's outputs with an independent model and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_prng_unit` | all 64 bytes every clock against a bit-level LFSR model; hold; seeding; zero guard; byte mean |
| `tb_bernoulli_sampler` | comparator and code on random and edge values; P(+1) = p/256 statistically |
| `tb_weight_memory`, `tb_input_spike_buffer`, `tb_neuron_state_memory` | storage, bank mapping, one-clock read |
| `tb_pe`, `tb_spiking_core` | sums of up to 192 rows; 3 clocks per 3x3 filter; clear and hold |
| `tb_temp_buffer` | capture and four-word group reads |
| `tb_neuron` | 50,000 random BN/IF cases against integer arithmetic |
| `tb_aggregation_core` | 48 passes over 16 neuron bases; spikes, stored potentials, 17-clock schedule |
| `tb_controller` | row order, PE enable and clear, buffer hand-over, latency `3*n_cin+21`, run while busy |
| `tb_bsnn_accel` | the whole design at default size (see below) |
| `tb_resnet_workload` | two chained 64-channel 3x3 layers, n_MC = 10, T = 4, layer-major host schedule |

`tb_bsnn_accel` plays the host at full default size. It runs one 64-filter
layer over 512 channels with 2 Monte-Carlo samples and 4 timesteps, at two
output positions. Those positions use the first and the last 64 neurons of
the state memory. It models the LFSRs, sampling, convolution and neurons
independently, and checks every output spike and every pass latency. It also
counts these mechanisms and fails if any never happens:

* +1 and -1 weights;
* weights that change between samples;
* spikes;
* reset-by-subtraction residues;
* saturation;
* first-timestep restarts;
* a seed load;
* a run request while busy.

To run a testbench with Verilator 5 from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/bsnn_pkg.sv \
          tb/tb_bsnn_accel.sv --top-module tb_bsnn_accel -o sim
./obj_dir/sim
```

The full-size end-to-end test builds in about 20 s and runs in under a
second. `tb_resnet_workload` runs at the operating point the network was
evaluated at: 10 samples and 4 timesteps. It uses two 64-to-64-channel
layers, as in the first stage of a CIFAR ResNet-18. Layer A's output spike
maps are the input of layer B. The patch is only 6x6 pixels, so that the
simulation stays short.

## Files

`rtl/bsnn_pkg.sv` holds the shared sizes and types. There is one module per
file: `bsnn_accel` (top), `controller`, `prng_unit`, `bernoulli_sampler`,
`weight_memory`, `input_spike_buffer`, `spiking_core`, `pe`, `temp_buffer`,
`aggregation_core`, `neuron`, `neuron_state_memory`, and `ram_1r1w`, a
generic block-RAM template that the memories use. Every module parameter
defaults to the sizes above.
