# RNG-free dropout for a hardware neural-network layer

Dropout regularises a neural network during training by switching off a
random subset of neurons for every input sample. In software the dropout
mask is built one bit at a time: draw a random number, compare it with the
dropout ratio, store the bit, repeat for every neuron. In hardware that is
either slow (one random-number generator, one bit per clock, N clocks per
mask) or large (N generators and N comparators working in parallel).

This design removes the random-number generators from the mask path. It
keeps one *predefined mask* with the wanted ratio of ones, and makes every
new mask by **rotating the current mask by r bit positions**. All N bits
move at once, so a new mask costs one clock cycle whatever N is, and since a
rotation only moves bits around, the number of kept neurons (the dropout
ratio) never changes. The masks repeat in a pattern and are predictable, so
the randomness is pseudorandom rather than true; for training purposes the
ratio and a changing pattern are what matter.

The RTL implements the mask generator and a fully-connected layer of N
neurons whose outputs it masks:

```
             x, w[0..N-1]  ──►  N × ( MAC ──► output stage ) ──► y[0..N-1]
                                                  ▲ keep[j]
                                                  │
  r_mode, r_const ─► control block ─ r ─► reconfigure block (rotate by r)
                                               ▲           │
                                               │           ▼
                     mask_init ───────────► mask store (predefined mask /
                                               current dropout mask)
```

## The mask generator

`mask_generator` is the heart of the design. It has three parts.

**Mask store** (`mask_store`). One N-bit register. After reset it holds a
built-in predefined mask; a host can load any other predefined mask with
`init_we`/`init_mask`. On every generation the rotated mask is written back
into the same register, so the next generation rotates the newest mask
again. The register output is the dropout mask in use. Keeping the
predefined mask and the current mask in one register means the generator
costs N flip-flops plus the few bits of r.

**Reconfigure block** (`reconfigure_block`). Pure combinational rotation:

```
mask_out[i] = mask_in[(i + r) mod N]        0 <= r < N
```

i.e. `{mask[r..N-1], mask[0..r-1]}` with bit 0 first. Example with five
bits, listed from bit 4 down to bit 0: `1 0 1 1 0` rotated by r = 1 gives
`0 1 0 1 1` (bit 0 moves to the top). It is written as a right shift of the
mask concatenated with itself, which synthesises to a barrel shifter of
log2(N) stages.

**Control block** (`rotate_control`). Holds r and advances it on every
generation, in one of three settings (`dropout_pkg::r_mode_e`):

| mode         | r after each generation                                   |
|--------------|-----------------------------------------------------------|
| `R_CONST`    | `r_const mod N`                                           |
| `R_SEQUENCE` | 1, 2, …, N−1, then back to 1                              |
| `R_RANDOM`   | low bits of a 16-bit LFSR, mod N; 0 is replaced by 1      |

Reset sets r = 1. The random setting is the only place a pseudo-random
generator appears, and it produces one log2(N)-bit number per mask, not one
per neuron; if it is never used, the 16 LFSR flip-flops can be removed.

The rotation amount is worth a thought. With a constant r, the masks cycle
with period N / gcd(N, r): r = 1 on a 64-bit mask gives 64 different masks,
r = 32 only two. Experiments with r = 1, 2, 4, 8, 16, 32 reported that
r = 1 trained less stably and larger values behaved alike, so the sequence
setting is a sensible default. The predefined mask should itself look
irregular: a periodic pattern such as `0101…` yields only two masks under
any rotation. The built-in mask, `dropout_pkg::default_mask(N)`, takes its
bits from a fixed 16-bit LFSR sequence (taps 16, 14, 13, 11, seed `16'hACE1`)
and forces the last bits so that exactly ⌊N/2⌋ are ones, i.e. a dropout
ratio of 0.5.

Timing: `gen = 1` in a cycle makes `mask` show the new mask after the next
clock edge. Held high, it yields one new mask per clock. `init_we` has
priority over `gen` for the mask (the control block still advances r on
that `gen`). A concurrent assertion checks that every rotation keeps the
number of ones.

**Cost.** After generic synthesis the 64-bit generator has 86 flip-flops
(64 mask bits, 6 bits of r, 16 LFSR bits), one 128-to-64 shifter and a
small adder for the sequence. The published FPGA figure for a 64-bit
generator of this kind is 70 registers and 64 LUTs, i.e. the same
structure without the random-r LFSR. For comparison, the same publication
reports 149 registers / 190 LUTs and 64 clocks per mask for a serial
RNG-and-comparator generator, and 588 / 640 with one clock per mask for a
parallel one.

**Several layers.** Each layer of a network needs its own mask, so each
dropout layer gets its own generator (one `dropout_layer` per layer). Give
the layers different `PREDEF_MASK` values, or load different masks at run
time, so that they do not drop the same positions.

## The neuron layer

`dropout_layer` (the top) has N `neuron`s, each a `mac` followed by a
`dropout_gate`.

**Streaming.** One sample's input vector arrives one element per beat. In a
beat (`x_valid = 1`) the layer takes an element `x` and the N weights
`w[0..N-1]` that connect it to the N neurons, so all neurons accumulate in
parallel and a K-element input takes K beats. `x_first` marks the first
beat (it clears the sums and triggers a new mask), `x_last` the last; both
may be set on a one-beat sample. Idle cycles (`x_valid = 0`) may occur
inside a sample. The next sample may start right after `x_last`.

**Masking.** Each neuron's output stage takes its sum one clock after the
last beat and keeps it if its mask bit is 1, or outputs 0 if it is 0, so
`y[j] = mask[j] · Σ_k w[j][k]·x[k]`. The mask that is applied is the one
generated on that sample's first beat, so every sample gets a fresh mask.
The output stage is drawn as a D-latch with the mask bit on its enable in
the original block diagram; a latch that is not enabled would hold its old
value rather than drop the neuron, so here it is a flip-flop that loads 0
for a dropped neuron.

**Training and inference.** `dropout_en` is sampled on each sample's first
beat. With 1 (training), the mask advances and is applied. With 0
(inference), no mask is generated and all neurons are kept. No 1/(1−p)
rescaling is applied in either mode; if the network was trained with
unscaled dropout, scale the weights or the consumer of `y` accordingly.

**Timing.** `y_valid` is a one-cycle pulse two clocks after the `x_last`
beat; `y` and `y_mask` (the mask that was applied to this result) then hold
until the next result. The core path is MAC (1 clock) → output stage
(1 clock); mask generation overlaps with accumulation and adds no latency.

**Numbers.** Inputs and weights are signed 16-bit (`DATA_W`), sums signed
40-bit (`ACC_W`), with no saturation; 40 bits hold 2^9 full-scale products
without overflow, and far more typical ones. There is no bias and no
activation function; apply them where `y` is consumed.

## Parameters

| parameter     | default | where | meaning |
|---------------|---------|-------|---------|
| `N`           | 64      | all   | neurons per layer = mask length (the 64-bit mask of the hardware comparison; 8 is the other size evaluated) |
| `RW`          | clog2(N)| mask  | width of r |
| `DATA_W`      | 16      | datapath | input and weight width |
| `ACC_W`       | 40      | datapath | accumulator width |
| `PREDEF_MASK` | `default_mask(N)` | mask | reset value of the mask store |

`default_mask` builds masks up to `dropout_pkg::MAX_N` bits; raise that
constant for wider layers.

## Layer sizes of the evaluated networks

The algorithm was evaluated in software on four networks. The dropout mask
is as long as the layer it is applied to, so each needs its own N:

| network and data                 | layer with dropout        | N needed |
|----------------------------------|---------------------------|----------|
| MLP 784-500-200-10, MNIST        | both hidden layers        | 500, 200 |
| LeNet, CIFAR10 (FC 1800-1000-10) | fully-connected hidden    | 1000     |
| GoogLeNet, 15-class object set   | before the classifier     | 1024 (the standard GoogLeNet width) |
| RNN language model 10000-650-650-650-10000, PTB | before the LSTM layers | 650 |

At the default N = 64 none of them fits in one layer instance; each fits by
setting N. `tb_workload_layers` runs two samples through each of the
500-, 200-, 1000- and 650-neuron layers, with their full input lengths
(784, 500, 1800, 650). The 1024-neuron layer is not simulated: it is the
same RTL at another size, and it multiplies the simulator's build time. The convolutional, pooling, LSTM and embedding
layers of those networks are not part of this RTL; only the dropout layer
is.

## What follows the original algorithm and what is added here

From the original description: the predefined mask held in memory, the
control block producing the rotate amount r, the reconfigure block that
rotates the mask in parallel, one clock per new mask, the rule
`{mask[r..], mask[..r-1]}`, the three ways of setting r, the MAC per neuron
whose output is enabled by the mask bit, a new mask per input sample, and
mask length equal to the number of neurons.

Choices made here: one register for both predefined and current mask (with
write-back); the built-in balanced reset mask and the load port; the
meaning of "sequence" (1…N−1) and the LFSR for random r; a flip-flop
output stage that outputs 0 instead of a latch; the neuron-parallel
streaming interface with first/last framing; fixed-point widths; the
`dropout_en` training/inference input; no bias, activation or rescaling;
asynchronous active-low reset everywhere.

Not included: where inputs and weights come from (they are top-level
ports), and the training logic (back-propagation and weight update) that
would use the mask on the backward pass as well.

## Files

| file | contents |
|------|----------|
| `rtl/dropout_pkg.sv` | `r_mode_e`, default widths, LFSR step, `default_mask()` |
| `rtl/rotate_control.sv` | control block (r) |
| `rtl/reconfigure_block.sv` | rotation |
| `rtl/mask_store.sv` | predefined / current mask register |
| `rtl/mask_generator.sv` | the three above, one mask per clock |
| `rtl/mac.sv` | multiply-accumulate |
| `rtl/dropout_gate.sv` | mask-enabled output stage |
| `rtl/neuron.sv` | MAC + output stage |
| `rtl/dropout_layer.sv` | top: N neurons + mask generator |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_workload_layers` |

## Simulating

Every testbench is self-checking, prints
`TB_RESULT checks=<n> failures=<m>` and stops on its own (each has a
watchdog). With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_dropout_layer rtl/dropout_pkg.sv tb/tb_dropout_layer.sv -o sim
./obj_dir/sim
```

Replace `tb_dropout_layer` with any other testbench name. The package must
be listed first; the other modules are found through `-y`.

What the testbenches establish:

- `tb_reconfigure_block`: the five-bit example above, and every r on random
  64-bit masks, bit by bit against `in[(i+r) mod N]`; ones preserved.
- `tb_rotate_control`: r for all three settings against an independent model
  (own LFSR), at N = 64 and N = 12 (modulo reduction), holding without `gen`.
- `tb_mask_store`: reset mask balanced, load priority, write-back, hold.
- `tb_mask_generator`: 64-bit and 8-bit generators against a bit-level
  model in all settings; with `gen` held high the mask changes on every
  clock (one mask per cycle); the number of ones never changes.
- `tb_mac`, `tb_dropout_gate`, `tb_neuron`: arithmetic against 64-bit
  integer sums; a dropped neuron outputs 0, not its previous value; result
  two clocks after the last beat.
- `tb_dropout_layer` (default parameters, no override): samples of 1 to 784
  inputs with gaps and back-to-back starts, every r setting including
  r = 1, 2, 4, 8, 16, 32, a run-time predefined-mask load and inference
  mode. All 64 outputs, the applied mask and the exact result cycle are
  checked against an independent model, and each of these situations is
  counted and must occur.
- `tb_workload_layers`: two back-to-back samples through layers of 500,
  200, 1000 and 650 neurons with 784, 500, 1800 and 650 inputs; every output,
  the applied mask (exactly half the neurons dropped) and the result cycle
  are checked.

Trust: every check is against models written in the testbenches, not
against the RTL; each testbench was also run against a deliberately broken
copy of its module and failed. What is not verified: timing closure on any
device, sums that overflow 40 bits, and any statement about training
quality, which depends on the surrounding training system.
