# FIXAR accelerator in SystemVerilog

## Design idea

FIXAR trains deep reinforcement learning networks (DDPG actor and critic)
entirely in fixed point, on chip. Two ideas carry the design:

1. **Dynamic fixed-point activations.** Training starts with 32-bit
   activations. During this phase the minimum and maximum activation values
   are monitored. Once the timestep count reaches the quantization delay,
   that range fixes a scale. From then on, activations are 16-bit. Weights
   and gradients stay 32-bit throughout. Each processing element (PE)
   contains two 32x16 multipliers. They form one 32x32 MAC at full precision
   or two independent 32x16 MACs at half precision, so half precision
   doubles throughput on the same hardware.
2. **Adaptive parallelism.** A matrix-vector product is decomposed by
   columns: each PE row receives one element of the vector, and partial
   sums flow down the PE columns.
   - In forward propagation the columns of a matrix are interleaved over the
     N array cores (intra-layer parallelism), and the cores' results are
     added.
   - In back-propagation every core holds the same weights and processes a
     different vector of the batch (intra-batch parallelism).
   - The transpose needed for back-propagation is free: a stored weight row
     goes either to a PE column or to a PE row.

## Structure

| Module | Role |
|---|---|
| `fixar_pkg` | Q16.16 / 16-bit types, the 512-bit word (16 elements), the instruction format |
| `fixar_pe` | PE with the configurable 32x32 / 2x(32x16) datapath |
| `fixar_line_buffer` | 512-bit activation line buffer; broadcasts one element per PE row, skewed in time |
| `fixar_pe_array` | 16x16 PEs; weights pre-loaded by column (inference) or by row (training) |
| `fixar_accumulator` | column accumulators at the bottom of the array |
| `fixar_aap_core` | one core = line buffer + array + accumulator |
| `fixar_weight_mem` | shared weight memory, 16384 x 512 bit = 1.05 MB |
| `fixar_grad_mem` | gradient memory of the same size, with an accumulating write port |
| `fixar_act_mem` | per-core activation memory, 47 x 512 bit = 2.94 KB |
| `fixar_act_unit` | none / ReLU / tanh / ReLU-derivative mask, plus noise injection |
| `fixar_prng` | 16 xorshift32 lanes for exploration noise |
| `fixar_quantizer` | range monitor and choice of the 16-bit scale |
| `fixar_adam` | serial Adam optimizer with its own moment memories |
| `fixar_ctrl` | instruction sequencer: FWD, BWD, GRAD, ADAM, CFG |
| `fixar_top` | N = 2 cores, all memories and units, plain host ports |

## Number formats

- Weights, gradients and full-precision activations are Q16.16.
- After the switch, an activation is a 16-bit signed value with 16 − s
  fractional bits. Two activations share a 32-bit slot, so a memory word
  carries two vectors.
- The shift s is the smallest value for which (|min| + |max|) >> s fits in
  15 bits. It is the power-of-two version of the scale δ = (|min| + |max|) / 2ⁿ.

## Operation

The host writes weights and input vectors and then issues instructions:

- **`FWD`** computes y = f(Wx + noise) on one vector, or on two in half
  precision. Input tiles are dealt round robin to the cores, and the cores'
  results are added.
  - With `to_host`, the output words are also sent to the host (the action).
  - With `step`, the instruction also ends a timestep, which may trigger the
    precision switch.
- **`BWD`** computes f(Wᵀe), each core on its own error vector. The optional
  ReLU-derivative mask uses stored forward activations.
- **`GRAD`** adds the outer product e·aᵀ, summed over the cores, into the
  gradient memory. It uses the PE array as 16 parallel multipliers.
- **`ADAM`** updates a range of weight words from their gradients and clears
  those gradients. It uses β1 = 0.9, β2 = 0.999 and a step size of 10⁻⁴.
- **`CFG`** sets the quantization delay, the step size and the noise scale.

**Timing.** Each core accepts one 16-element tile per cycle, and its results
are ready ARR + 2 cycles after the fire. Adam takes about 86 cycles per
element.

## Memory fit of the evaluated workloads

All three workloads use DDPG with hidden layers of 400 and 300, and batch
sizes 64 to 512. The first-layer matrix of each network is stored transposed, and
rows are padded to whole 16-element words. Words needed:

| Workload | Actor (words) | Critic (words) | Total | Fits in 16384? |
|---|---|---|---|---|
| HalfCheetah (17 states, 6 actions) | 425 + 7500 + 114 | 575 + 7500 + 19 | 16133 | yes |
| Hopper (11 states, 6 actions as printed) | 275 + 7500 + 114 | 425 + 7500 + 19 | 15833 | yes |
| Swimmer (8 states, 2 actions) | 200 + 7500 + 38 | 250 + 7500 + 19 | 15507 | yes |

One vector's activations take 47 words per core, about 2.94 KB. The batch
is streamed through the cores, so batch size does not change the memory
needed.

## Differences from the original design

- The number of cores N is not given. This design uses 2.
- The zero point of the quantizer is dropped, and δ is a power of two. The
  16-bit format is symmetric and signed.
- Biases are not supported. The weight memory holds the matrices only,
  because padding rows to whole words already uses most of the 16384 words.
- At the precision switch, activations already stored in memory are not
  converted. The host must re-load inputs in the 16-bit format.
- The noise is uniform (xorshift), not Gaussian. tanh is an 8-chord
  piecewise-linear fit with error below 0.03.
- Adam has no bias correction, and epsilon is 2⁻²⁴.
- Weight pre-loads are not overlapped with computation (no double-buffered
  PE weights), and the cores are pre-loaded one after the other from the
  single 512-bit weight port. A forward group of N input tiles therefore
  takes 16 N + ARR + a few cycles (53 with N = 2) instead of about 16.
- The PCIe DMA, kernel interface, HBM interface and host CPU are not built.
  Plain ports stand in for the host link.

## Verification

Every block has a self-checking testbench in `tb/` with random stimulus and
a watchdog. `tb_fixar_top` runs a small actor network end to end at the
default parameters:

- forward passes on both cores, with noise and output to the host;
- a transposed back-propagation with the ReLU mask;
- two gradient accumulations and an Adam update;
- the switch to half precision, followed by a half-precision forward pass.

It counts each of these mechanisms and fails if any never happened.

`tb_fixar_workload` runs the full-size HalfCheetah actor (17-400-300-6):

- the forward pass of two states, one per core;
- the back-propagation of both action errors through the output layer,
  with both cores working at once.

It checks every value against a bit-exact model and checks each layer's
cycle count. Hopper and Swimmer differ only in their state and action sizes.
