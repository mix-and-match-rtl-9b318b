# A mixed-scheme GEMM accelerator: fixed-point and sum-of-power-of-2 cores side by side

An FPGA has two kinds of arithmetic resource. DSP slices multiply well. LUTs are plentiful
but make poor multipliers, though they are good at shifts and additions. A network quantised
to one scheme uses only one of the two.

This design quantises each layer with two schemes at once:
- Filters whose weights spread widely (high variance) use 4-bit fixed-point weights. These
  need real multipliers.
- The remaining filters use 4-bit sum-of-power-of-2 (SP2) weights. Each weight is the sum of
  two powers of two, so a product is two shifts and one addition.

Each filter (one row of the weight matrix) is assigned to a scheme offline. The accelerator
then has two GEMM cores working in parallel on the same activations. A fixed-point core is
built from multipliers and sized to the DSP budget. An SP2 core is built from shifters and
adders and sized to the LUT budget. In the default configuration the SP2 core is twice as
wide as the fixed-point core, so one third of the filters of each layer go to DSPs and two
thirds to LUTs.

The control structure is that of a decoupled load / compute / store accelerator in the
style of VTA. Three modules run concurrently and synchronise through dependency tokens.

## Number formats

Activations are n = 4-bit unsigned values, the output of ReLU. Weights are m = 4 bits in
sign-magnitude form, with the sign in the MSB.

**Fixed-point weight** `{s, mag[2:0]}`
- Value: ±mag, for a level set of {0, ±1/7, …, ±1} times a per-layer scale.
- The fixed processing element (`fixed_pe`) multiplies the activation by mag and applies
  the sign.

**SP2 weight** `{s, c1[m1-1:0], c2[m2-1:0]}`, with m1 = 2 and m2 = 1
- Terms: q1 = 2^-(2^m1 - c1) and q2 = 2^-(2^m2 - c2). A zero code gives a zero term.
- Value: ±(q1 + q2).
- Working unit: 2^-(2^m1 - 1), i.e. 1/8 here. In that unit both terms are integer powers of
  two, and the product with an activation a is:

```
shifter A : c1 ? a << (c1 - 1)                  : 0
shifter B : c2 ? a << (c2 - 1 + 2^m1 - 2^m2)    : 0
product   : ±(A + B)
```

- Consequence: the fixed-point and SP2 partial sums are in different units. They are
  requantised separately; the tensor ALU's `core_mask` lets each core get its own shift.
  The two cores never add into the same register, because each owns distinct output
  channels.

## Datapath

`gemm_fixed` and `gemm_sp2` compute one Bat × Blk_in by Blk_in × Blk_out product per cycle.
- Each is an array of processing elements (`fixed_pe` / `sp2_pe`).
- Each feeds an adder tree for each of its Bat × Blk_out outputs.
- Default sizes: Bat = 4, Blk_in = 16, Blk_out = 16 (fixed) and 32 (SP2).

The input buffer holds activation tiles. One tile row is read per step and broadcast to both
cores.

Each core has its own:
- weight buffer (Blk_out × Blk_in weights per row);
- register file of 32-bit partial sums (`reg_file`, 2 read ports and 1 write port);
- output buffer (n-bit results);
- filter-index buffer.

The tensor ALU (`tensor_alu`) works on a whole register-file row:
- Operations: add, max, min, arithmetic shift and multiply.
- The second operand is a signed immediate or another row.
- It also writes the result, clipped to [0, 2^n - 1], to the output buffer.
- Typical uses: ReLU is max with 0, requantisation is a right shift, and bias is an add.

## Instructions and the loop nest

Instructions are 128 bits: `{payload[120:0], dep[3:0], opcode[2:0]}`. The field layouts are
given as packed structs in `msq_pkg.sv`.

| opcode | executed by | effect |
|---|---|---|
| LOAD (INP, WGT_FIX, WGT_SP2, IDX_FIX, IDX_SP2) | load module | 2-D DRAM → buffer copy of rows |
| LOAD (UOP) | compute module | fill the micro-op cache |
| GEMM | compute module | loop nest over micro-ops; accumulate (or reset) in both cores |
| ALU | compute module | same loop nest; element-wise op in the cores chosen by `core_mask` |
| STORE | store module | write one core's output rows to DRAM, scattered by filter index |
| FINISH | compute module | raise `done` |

GEMM and ALU are driven by micro-ops, as in VTA.
- A micro-op is 32 bits: `{wgt_idx, inp_idx, acc_idx}`.
- An instruction runs `i0 < iter_out`, `i1 < iter_in` and `u ∈ [uop_bgn, uop_end)`.
- Each index is the micro-op's index plus `i0·f0 + i1·f1`, with per-instruction factors.
- One loop step is one row operation. For GEMM, both cores work on that row at the same
  time.

Each instruction has four dependency flags: `pop_prev`, `pop_next`, `push_prev` and
`push_next`. Neighbours are taken in the chain load → compute → store.
- Four token counters (`dep_token`, 4 bits each by default) join the neighbours: load→compute,
  compute→load, compute→store and store→compute.
- Before an instruction starts, its module waits for the tokens it pops.
- When the instruction ends, the module pushes tokens.
- With double-buffered tiles, this lets loads of the next tile overlap compute on the
  current one.

## Where the outputs go: index buffers and the store scatter

The two cores hold filters that are not adjacent output channels, so results cannot be
written back as a dense block.

Each core's index buffer row lists the global channel number g of each of its Blk_out local
filters for one tile. In DRAM, activations are laid out in channel blocks:

```
nibble address = base + ((g / Blk_in) * n_pix + pixel) * Bat * Blk_in + b * Blk_in + g % Blk_in
```

The store module reads an output row and its index row, and writes each element to that
address.
- Each element is one 64-bit write with a single nibble strobe set.
- The store is therefore Bat × Blk_out write beats per row.
- The output lands in exactly the layout that the next layer's input LOAD expects, so layers
  chain without host reshuffling.

## Timing

**Compute**
- The compute module is a three-stage pipeline: micro-op read, then buffer and register-file
  read, then compute and write-back.
- It retires one loop step per cycle.
- If a step reads the register-file row written by the step just before it, the value is
  forwarded from the write-back stage. The partial-sum bypass counts this on `fwd_count`.
- A 12-step reduction takes 16 cycles, including pipeline fill and drain.

**Fetch, load and DRAM**
- Fetch reads instructions in bursts and stalls when a target queue is full.
- Load issues one DRAM burst per row.
- A round-robin arbiter (`dram_arbiter`) shares the single DRAM read port among fetch, load
  and the micro-op loader.

**Store**
- The store module spends two cycles reading a row.
- It then spends one cycle per element, for as long as `wr_ready` is high.

## Top level and interface

`msq_top` has these ports:
- the clock and an active-low reset;
- `start`, `insn_addr` (word address) and `insn_count`;
- `busy` and `done`;
- a DRAM read port: a burst request of address and length, answered by in-order beats with
  `resp_last`;
- a DRAM write port: word address, 64-bit data and a per-nibble strobe;
- observation counters for stalls, token waits, bypasses and steps.

DRAM itself is external. `tb/dram_model.sv` is a behavioural model with configurable latency
and random gaps.

## Parameters

| parameter | default | meaning |
|---|---|---|
| BAT | 4 | batch rows per tile |
| BLK_IN | 16 | reduction width per step |
| BLK_OUT_FIX / BLK_OUT_SP2 | 16 / 32 | filters per step in each core |
| ACT_W, WGT_W | 4, 4 | activation and weight bits |
| M1, M2 | 2, 1 | SP2 code field widths (M1 + M2 = WGT_W − 1) |
| ACC_W | 32 | partial-sum width |
| INP/WGT/ACC/UOP/IDX_DEPTH | 512/512/256/1024/64 | buffer rows |

The defaults are the configuration for a Zynq XC7Z045 with a 1:2 fixed:SP2 ratio. The smaller
XC7Z020 configuration is Bat = 1, Blk_in = 16, Blk_out = 16 / 24 (1:1.5). It is reached
through the parameters and has not been simulated.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. For example:

```
verilator --binary -j 0 --top-module tb_msq_top -Irtl rtl/msq_pkg.sv rtl/*.sv tb/dram_model.sv tb/tb_msq_top.sv
./obj_dir/Vtb_msq_top
```

`tb_msq_top` runs the top at its default sizes on one 1×1 convolution layer: 32 input
channels, 48 filters split at random 16 / 32 between the schemes, and 4 pixels × 4 images.
- It checks every output nibble in DRAM against a reference computed in the testbench.
- It requires each mechanism to occur at least once: fetch stalls, token waits, the bypass,
  arbitration conflicts, write back-pressure and per-core ALU operations.
- The build takes about two minutes. The run takes seconds.

## Departures and limits

- **Shifter B range.** One statement bounds shifter B's shift at 2^m2 − 2 bits. That holds
  only if q2 is measured in its own unit. Here q1 and q2 are added in a common unit, so
  shifter B carries an offset of 2^m1 − 2^m2. The numeric values of the weights are those of
  the SP2 definition.
- **Convolution.** Convolution is expressed as GEMM over a channel-blocked layout. There is
  no padding or im2col hardware: a K×K layer must be laid out by the instruction stream
  (one micro-op per kernel tap), and borders must be prepared in DRAM.
- **Activation functions.** Only piecewise-linear activations (ReLU, clipping) are provided.
  The ALU has no sigmoid or tanh, which RNN workloads would need.
- **Single scheme.** Both cores always run together. A pure fixed-point or pure SP2 layer
  leaves one core idle, with its filters padded with zero weights.
- **Own choices.** The instruction encoding, the token counter width, the DRAM protocol, the
  one-nibble-per-beat store and the pipeline depth are this design's own. The paper
  specifies the cores, the buffers and their organisation.
- **Quantisation is offline.** Assigning filters to schemes by variance, and training, are
  not hardware.
