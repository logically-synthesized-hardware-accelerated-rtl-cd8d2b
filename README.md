# A restricted Boltzmann machine sampler in hardware: one Gibbs step per clock

A restricted Boltzmann machine (RBM) is a two-layer network of binary
stochastic neurons: a *visible* layer `v` and a *hidden* layer `h`, joined by
a weight matrix `W`, with visible biases `b` and hidden biases `a`. It assigns
each joint state the probability `p(v,h) ∝ exp(vᵀWh + aᵀh + bᵀv)`. Because
no two neurons in the same layer are connected, every neuron of one layer is
independent of the others once the other layer is known:

    p(h_j = 1 | v) = σ(a_j + Σ_i v_i W_ij)
    p(v_i = 1 | h) = σ(b_i + Σ_j W_ij h_j),        σ(x) = 1 / (1 + e^-x)

So a whole layer can be resampled in one parallel step (block Gibbs
sampling). Repeat the step long enough and the visible states appear with the
model's probabilities.

The design here puts that step into logic. Every neuron has its own update
circuit, so one clock resamples all neurons of both layers. It is meant for
combinatorial problems that have been written as an RBM. The main case is
integer factorization. The RBM that models a multiplier is built by merging
small trained RBMs for adders and multipliers, the way gates are wired into a
circuit. The host fixes ("clamps") the visible neurons that hold the product.
It then streams out samples of the remaining neurons, which hold the two
factors. The right factors are the most frequent sample, the mode of the
sampled distribution. Only the sampler is hardware. Training, merging and
quantizing the model happen offline, and the host analyses the samples.

The default size is 80 visible × 600 hidden neurons with 8-bit weights and
biases. That is large enough for a merged 16-bit multiplier/factorizer
(78 × 576). All sizes are parameters.

## Block diagram

```
 host write port ──► io_controller ──► memory_controller ──► prog_wr_t bundle
 (address, data)        │                  │ run / done / count       │
                        │                  ▼                          ▼
                        │        ┌──────────────── rbm_core ──────────────────┐
                        │        │ weight_array   bias_array   clamp_array    │
                        │        │      │ W (all)     │ a, b        │ clamps  │
                        │        │      ▼             ▼             ▼         │
                        │        │  node_layer (hidden, 600) ◄── v ──┐        │
                        │        │  node_layer (visible, 80) ◄── h ──┘        │
                        │        └──────────────────── visible registers ─────┘
                        │                                     │ 80-bit sample
 host sample stream ◄───┴──── 32-bit words ◄── sample_fifo ◄──┘
```

Each `node_layer` holds one register per neuron and one `node_update`
circuit per register. A `node_update` contains a `masked_adder_tree`, a
bias adder, a `sigmoid_lut`, an `lfsr32` and a comparator.

## The sampling step

This is the core of the design and the part worth reading closely.

**Numbers.** Weights and biases are signed two's-complement fixed-point
numbers, `W_W = B_W = 8` bits, with `FRAC = 4` fractional bits. A weight
of 1.0 is therefore 16, and the range is [-8, +7.94]. Weights and biases
share the binary point, so they add without shifting. Models trained with
6-bit quantization fit in these fields unchanged.

**Row product without multipliers.** The state of the other layer is binary,
so `Σ_i v_i W_ij` is a sum of selected weights. Each weight passes a 2-to-1
multiplexer whose select is the other layer's neuron (weight if 1, zero if 0).
The survivors go into a balanced binary adder tree, `ceil(log2 N)` levels
deep. The tree's output width is `W_W + clog2(N+1)` bits, so it cannot
overflow (18 bits for 600 inputs). The whole tree is combinational: the
product of a full row takes one cycle.

**Sigmoid.** The sum plus the bias is the neuron's *field*. It is saturated
to `LUT_IN_W = 8` signed bits, which covers x ∈ [-8, 8) in steps of 1/16.
It then indexes a 256-entry table:

    TAB[i] = min( round( σ(signed(i) / 2^FRAC) · 2^P_W ), 2^P_W − 1 ),   P_W = 16

The table is computed during elaboration by a constant function (in
`sigmoid_lut.sv`), so changing `LUT_IN_W`, `FRAC` or `P_W` rebuilds it.
Saturation costs little: σ(±8) is within 3.4·10⁻⁴ of 0 or 1.

**Random draw.** Every neuron has its own 32-bit LFSR. The feedback
polynomial is x³² + x²² + x² + x + 1, so the period is 2³² − 1. Each LFSR
gets a different non-zero seed from `rbm_pkg::lfsr_seed(layer, index)`. The
top `P_W` bits of the LFSR are the random number `r`. The neuron's new value
is `r < TAB[field]`, which is 1 with probability σ(field), quantized to
2⁻¹⁶. The LFSR advances once per sampling step. Neighbouring LFSR states
overlap in 31 bits, so successive draws of one neuron are not independent
numbers. The arrangement relies on the observation that the sampler is
insensitive to random-number quality as long as different neurons are
uncorrelated. Running one chain for more than about 4·10⁹ steps repeats the
random sequence.

**Clamps.** A clamped visible neuron ignores all of this and loads its clamp
value. Only visible neurons can be clamped.

**Schedule: both layers on every clock.** On each enabled clock both layers
load new values, and each is computed from the *other* layer's current
registers:

    h(t+1) ~ p(h | v(t)),      v(t+1) ~ p(v | h(t))

No layer reads itself, so there is no hazard and no pipeline. A new visible
sample appears on every clock. The cost is that the state splits into two
interleaved chains that never interact: (v(0), h(1), v(2), h(3), …) and
(h(0), v(1), h(2), …). Each of them is an ordinary alternating block-Gibbs
chain, so every visible sample comes from a correct chain. Consecutive
samples in the stream, however, come from the two different chains. A
strictly alternating schedule would yield one sample every two clocks; the
description this design follows states one sample per clock.

**Stalls.** The core steps only while `run` is high and the previous sample
has been taken (`!smp_valid || smp_ready`). When the FIFO is full the whole
chain freezes, LFSRs included. No sample is dropped, and the recorded stream
stays a contiguous piece of the chain.

## Programming the model and running

The host has a write-only memory-mapped port: 24-bit address, 32-bit data.

| addr[23:21] region | addr[20:11] | addr[10:0] | data |
|---|---|---|---|
| 0 `REG_WEIGHT`  | visible i | hidden j | `W[i][j]` = data[7:0] |
| 1 `REG_VBIAS`   | –         | visible i | `b[i]` = data[7:0] |
| 2 `REG_HBIAS`   | –         | hidden j  | `a[j]` = data[7:0] |
| 3 `REG_CLAMP`   | –         | visible i | data[0] = clamp enable, data[1] = clamped value |
| 4 `REG_CONTROL` | –         | 0 `CTRL_RUN`    | data[0] = run, data[1] = clear sample count and `done` |
|                 |           | 1 `CTRL_TARGET` | samples per run (0 = until run is cleared) |

Everything resets to zero: weights and biases 0, nothing clamped, not
running. A write reaches the arrays three clocks after it is presented
(io_controller, memory_controller and the array register). One write stores
one weight, so loading a full 80 × 600 model takes 48,000 writes.

A run is: load the model → clamp → write `CTRL_TARGET` → write
`CTRL_RUN = 3` (run + clear). The run clears itself after exactly `target`
samples and raises `done`. `sample_count` counts the samples taken;
`stalled` is high on clocks when the core wants to step but the FIFO is
full.

Weights, biases and clamps are registers, not RAM. Every weight feeds a
multiplexer on every clock, so the whole matrix must be readable at once.
An 80 × 600 × 8-bit model is 384,000 flip-flops.

## Sample stream

Every visible sample (NV bits) enters `sample_fifo`, which holds 512 samples
and is first-word-fall-through with valid/ready on both sides.
`io_controller` sends each sample as `ceil(NV/32)` 32-bit words, least
significant word first, zero-padded. Word k carries visible neurons
32k … 32k+31. At the default size that is three words per sample. The host
stream therefore carries at most one sample every three clocks, and the FIFO
fills and stalls the core unless the link is wider. The stream is stable
while `host_rd_valid && !host_rd_ready` (an assertion checks this). The host
sees it as a plain valid/ready interface. The real accelerator used a PCIe
link core here, which is not included.

## What fits

Sizes of the trained models (visible × hidden neurons) against the default
80 × 600:

| model | size | fits |
|---|---|---|
| 1/2/4/8/16-bit adder | 5×6, 8×28, 14×64, 26×96, 50×128 | yes |
| 32-bit adder | 98×192 | no: 98 visible > 80 |
| 4/6/8/10-bit multiplier | 8×16, 12×48, 16×64, 20×144 | yes |
| 12-bit multiplier (merged) | 60×352 | yes |
| 16-bit multiplier | 32×512 | yes |
| 16-bit multiplier (merged), used for 16-bit factorization | 78×576 | yes |

A smaller model is loaded into the first rows and columns. The unused
weights and biases stay 0, so the unused neurons flip at random and
influence nothing.

## Where this design departs from the description it follows, and what is its own

Taken from the description: the mask-multiplexer/adder-tree/bias/sigmoid
LUT/PRNG/comparator datapath; single-cycle accumulation; one node update
circuit per neuron register and a new visible sample per clock; a 32-bit
LFSR per neuron with distinct seeds; storage for weights, biases and clamps
written through a memory-mapped interface; a FIFO from the visible registers
to the IO controller; 80 × 600 as the largest size; 8-bit weights and biases.

This design's own choices (the description gives none of them):
- the position of the binary point (4 fractional bits), the LUT width (8 in,
  16 out) and the saturation of the field;
- the LFSR polynomial, seeding rule and use of its top bits;
- updating both layers on every clock (two interleaved chains);
- registers for the model storage, and its reset to zero;
- the address map, the control registers (run, clear, sample target), the
  FIFO depth and stall-on-full, the 32-bit word packing;
- the host interface: a generic write port and valid/ready stream stand in
  for the PCIe core.

The description quantizes weights to 6 bits in one place and reports 8-bit
weights and biases for the hardware in another. This design uses 8 bits.

Not included: the PCIe link and the host software that programs the model,
collects samples and finds the mode. A factor-checking shortcut on the host
(stop as soon as a sampled pair multiplies to the target) belongs to the
host software as well.

## Verification

Every module has a self-checking testbench in `tb/`. The tests compare
against models written independently of the RTL: a polynomial LFSR model, a
floating-point sigmoid, and a behavioural block-Gibbs model of the whole
core.

- `tb_rbm_core`: a 6 × 5 core with random model and clamps must match the
  behavioural model bit for bit on every clock. It checks one sample per
  clock with a ready consumer and a held sample during stalls.
- `tb_rbm_fpga_top`: an end-to-end factorization at 11 × 16 through the
  host ports. A hand-built RBM encodes the 2-bit × 2-bit multiplication
  table. Hidden neuron j is a template for one table row: weight +4 to a
  neuron that is 1 in that row, −4 to one that is 0, and total bias
  2 − 4·(ones in the row), so its field is 2 − 4·(Hamming distance). Three
  visible "bias" neurons clamped to 1 carry the part of the hidden bias that
  does not fit in 8 bits. With the product clamped to 6, the two most
  frequent answers must be (2,3) and (3,2). The distribution of (a,b) over
  4000 samples must be within 0.12 total-variation distance of the exact
  distribution, which the testbench computes. The test also requires at
  least one occurrence each of a stall, a full FIFO, clamped samples and a
  stop at the target.
- There is no full-size testbench. The default 80 × 600 design lints and
  elaborates, but building a simulator for it took well over ten minutes
  and was not finished. The largest top-level design simulated end to end is
  11 × 16 (`tb_rbm_fpga_top`). The largest single blocks simulated are the
  600-input adder tree (`tb_masked_adder_tree`) and the 80-visible-node
  word packer (`tb_io_controller`).

## Simulating

All files are SystemVerilog 2017 and need no defines. `rtl/rbm_pkg.sv` and
`tb/tb_ref_pkg.sv` are packages and go first. With Verilator 5:

```
verilator --binary --timing --assert -j 4 --top-module tb_rbm_fpga_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/rbm_pkg.sv tb/tb_ref_pkg.sv tb/tb_rbm_fpga_top.sv
./obj_dir/Vtb_rbm_fpga_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. For the
other testbenches, replace the top-module name and the testbench file.

To change the size or number format, override the parameters of
`rbm_fpga_top` (`NV`, `NH`, `W_W`, `B_W`, `FRAC`, `LUT_IN_W`, `P_W`,
`FIFO_DEPTH`). The address map limits NV to 1024 and NH to 2048.

## Files

| file | contents |
|---|---|
| `rtl/rbm_pkg.sv` | default sizes, address map, `prog_wr_t` write bundle, LFSR seed rule |
| `rtl/rbm_fpga_top.sv` | top level |
| `rtl/io_controller.sv` | host write forwarding, sample → 32-bit words |
| `rtl/memory_controller.sv` | address decode, run/target/count |
| `rtl/sample_fifo.sv` | sample FIFO |
| `rtl/rbm_core.sv` | storage + both layers, stall logic |
| `rtl/weight_array.sv`, `bias_array.sv`, `clamp_array.sv` | model storage |
| `rtl/node_layer.sv` | one layer: registers + update circuits |
| `rtl/node_update.sv` | one neuron's update |
| `rtl/masked_adder_tree.sv` | multiplexer mask + adder tree |
| `rtl/sigmoid_lut.sv` | sigmoid table |
| `rtl/lfsr32.sv` | per-neuron PRNG |
| `tb/tb_*.sv` | one testbench per module, `tb_ref_pkg.sv` reference models |
