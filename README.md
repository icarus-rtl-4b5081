# ICARUS plenoptic core in SystemVerilog

This is synthesizable SystemVerilog for ICARUS, an accelerator that runs the
whole Neural Radiance Fields (NeRF) rendering pipeline on chip. It builds one
plenoptic core (PLCore) with three parts:

- a positional encoding unit (PEU) that turns sample positions and directions into Fourier features;
- an MLP engine that evaluates the network with weight-stationary, batch-of-128 matrix–vector products;
- a volume rendering unit (VRU) that composites the samples of a ray into a pixel.

Around the core sit an instruction-driven controller, three host registers on
an AXI4-Lite port, and 64-bit input and output streams.

## Structure

```
icarus_top
├── icarus_regs        Ctrl (W) / Op (W) / Stat (R) registers, AXI4-Lite, 64-bit
├── sync_fifo          16-entry instruction queue
└── plcore
    ├── sync_fifo      input stream FIFO (16) and output FIFO (64)
    ├── plcore_ctrl    FSM: fetch, input demux, layer loops, render pass
    ├── sram_1r1w      data buffer, input memory, activation memories 1/2,
    │                  MONB/SONB weight and bias memories, result buffer
    ├── peu            frequency banks, 6-stage cascaded MAC, cordic_sincos
    ├── monb           64 x rmcm_block (rmcm_pcm + 64 rmcm_ssa), 64 x adder_tree,
    │                  psum memory, 64 x act_quant
    ├── sonb           64 exact multipliers, adder_tree, psum, act_quant
    └── vru            sigmoid_pwl, cordic_exp, transmittance / colour accumulators
```

`icarus_pkg` holds the widths, the sample record, the opcodes and the 64-bit
instruction word.

## Number formats

| quantity | format |
|---|---|
| positions, directions | 16 bit signed, 12 fraction bits |
| ray spacing δ | 16 bit unsigned, 12 fraction bits |
| frequencies | 16 bit signed, 6 fraction bits, in turns per unit |
| activations | 12 bit signed, 8 fraction bits |
| MONB weights | 9 bit signed-magnitude, 7 fraction bits |
| biases | 16 bit signed, 8 fraction bits |
| SONB outputs (σ, raw colour) | 16 bit signed, 8 fraction bits |
| partial sums | 32 bit |
| T, exp, colours | unsigned Q1.15 |

The 16-bit inputs follow the paper's 2 bytes per input value. The 12-bit
activation width is derived from the memory sizes: 128 samples × 256 neurons
× 12 bit = 48 KB, the size of one activation memory.

## Memories (default sizes)

One memory word holds one 64-lane chunk of one sample.

| memory | organisation | size |
|---|---|---|
| input memory | 1024 × 768 bit (128 samples × 8 chunks) | 96 KB |
| activation memory 1 and 2 | 512 × 768 bit each (128 × 4 chunks) | 48 KB each |
| MONB weight memory | 10325 × 576 bit (one 64-row weight column per word) | 726 KB |
| SONB weight memory | 16 × 576 bit | 1.125 KB |
| frequency memory | 2 banks × 128 × 48 bit | 1.5 KB |
| MONB psum memory | 128 × 2048 bit | 32 KB |

The frequency memory follows the text: two banks of 3 × 128 entries. The block
diagram labels it 16 KB, which does not agree with that organisation.

## How it computes

**Positional encoding (peu).**
- The frequency matrix A sits in two banks. Bank 0 holds a 3-D matrix, or the first half of a 6-D one.
- For each column a_k, a 6-stage cascaded MAC forms z_k = a_k·p.
- In 3-D mode (R3), bank 1 is not read and the result is tapped after stage 3. In 6-D mode (R6), all six stages are used.
- The fraction of z_k, taken as a 16-bit angle (2^16 = one turn), goes to a 16-stage pipelined sin/cos CORDIC.
- cos and sin land in lanes 2j and 2j+1 of an input-memory word, 32 frequencies per word.

**MONB (hidden layers).**
- A layer is cut into 64×64 tiles. For each tile, the 64 weight columns are loaded into the 64 RMCM blocks, then every sample of the batch streams through, one input chunk per cycle.
- In each RMCM block, the PCM forms 1x, 3x, 5x and 7x of the activation; it holds its registers when x is 0.
- Each of the 64 SSAs selects and shifts those values for both 4-bit digits of its weight magnitude and adds them.
- Odd digits 9, 11, 13 and 15 are approximated as 1x<<3, 5x<<1, 3x<<2 and 7x<<1, so the mux is 4:1.
- Row adder trees sum the 64 products. Per-sample partial sums accumulate over the input chunks in the psum memory.
- On the last chunk, act_quant adds the bias, applies ReLU and re-quantizes to 12 bits. The result goes to the destination activation memory.
- Latency from input to result is 4 cycles.

**SONB (output layers).** The same batch loop with one output neuron per tile:
- 64 exact multipliers and an adder tree, accumulated in a psum memory;
- a 16-bit result, with no ReLU;
- results go to a 4-column result buffer (σ and r, g, b).

**VRU.**
- Per sample: σ is clamped at 0, and σδ goes to a range-reduced hyperbolic CORDIC that gives exp(−σδ).
- T_{i+1} = T_i·exp(−σδ), and C += (T_i − T_{i+1})·sigmoid(c_i).
- The sigmoid is the 4-segment PLAN approximation.
- The sample marked `last` closes the ray and emits a pixel {16'h0, b, g, r}. T and C then restart.
- Latency from the last sample to its pixel is 20 cycles.

**VRU bypass.** A SONB layer with destination OUT sends the raw result-buffer
row {σ, b, g, r} to the output stream instead, for example for SDF or SLF
outputs. The render pass only issues while the output FIFO has more than 24
free entries, so back-pressure on the output stalls it safely.

## Programming model

The host writes 64-bit instructions to Op (0x08). They queue in a 16-entry FIFO,
and a write stalls while the queue is full.

- Ctrl (0x00): bit 0 enables fetching; bit 1 clears done.
- Stat (0x10): busy, done, the current opcode, and the queue level.
- Reading a write-only register, or writing Stat, returns SLVERR.

Instruction fields, MSB first: `op[4] src[2] src_base[4] n_in[4] cat_base[4]
n_cat[4] n_out[3] dst[2] relu addr[14] bias[8] count[12] rcol[2]`.

| opcode | action | input stream |
|---|---|---|
| LD_FRQ (1) | frequency entries to bank `src` at `addr`, `count` entries | 1 beat each: {a2,a1,a0} |
| LD_WM / LD_WS (2/3) | MONB / SONB weight words | 9 beats each, low beat first |
| LD_BM / LD_BS (4/5) | MONB bias words (64 × 16 bit) / SONB biases | 16 / 1 beats |
| LD_SMP (6) | `count` samples into the data buffer; sets the batch size | 2 beats: {last, δ, dir, pos} |
| ENC (7) | encode the batch: mode `src` (0 position R3, 1 direction R3, 2 position+direction R6), `count` frequencies from `addr`, to input chunks from `src_base` | – |
| MONB (8) | layer: `n_in` chunks from `src` (0 input memory, 1 AM1, 2 AM2), plus `n_cat` input-memory chunks from `cat_base` (skip connection); `n_out` output chunks to `dst`; weights at `addr`, tile t = o·(n_in+n_cat)+i at words addr+64t…; biases from `bias` | – |
| SONB (9) | layer with `n_out` (≤4) single-neuron outputs into result-buffer columns `rcol`…; `dst` 0 keep, 1 VRU, 2 output stream | – |
| END (10) | set done | – |

Weight word w of a MONB tile holds column w: lane r holds W[r][c] at bits
9r+8..9r. The PEU's interleaved cos/sin order only permutes the first layer's
weight columns.

## Fit with the paper's workloads

- **NeRF network** (8×256 layers, a skip at layer 5, a 256 feature layer and a 128 colour layer): 146 MONB tiles.
  - 9344 of the 10325 weight words, 672 of 726 KB.
  - 10 SONB words and 38 bias words.
  - It fits. The coarse and fine networks do not fit together, so one is reloaded between passes.
- **800×800 image with 192 samples per ray:** 122.88 M samples.
  - The MONB array alone needs 146 cycles per sample: 44.9 s at 400 MHz, close to the paper's 45.75 s.
  - This RTL does not overlap weight loading with computation. It needs about 271 cycles per sample, about 83 s.
- **SDF** (4 layers) and **SLF** (8 layers, 6-D input): the paper gives no widths. At an assumed 256 wide with 128 frequencies, they take 64 and 128 tiles, so both fit.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- The arithmetic blocks are checked against integer models, or against real-number models within stated tolerances: CORDIC sin/cos ±3 LSB, exp ±8 LSB, sigmoid within 0.0195.
- Latencies are checked where a block has a fixed pipeline.
- `tb_icarus_top` runs the whole core at the default size, with no parameter overrides:
  - it loads frequencies, 48 samples (6 rays), weights and biases over the stream;
  - it encodes in all three modes and runs two MONB layers (the second with a skip connection);
  - it runs a 4-output SONB layer once with the VRU bypassed and once into the VRU.
- It checks every encoded feature, both hidden layers bit-exactly, the raw outputs bit-exactly, and the pixels within 0.005.
- It counts each mechanism and fails if one never occurs: R3/R6 switches, bank 1 asleep, zero-gated multiplies, skip chunks, VRU bypass, queue-full stalls, input-stream stalls and render stalls.
- The controller, core, PEU and register blocks are checked through this end-to-end test.
- A copy of each block with one deliberate bug makes its testbench fail.

## Not implemented

- The multi-core on-chip network: the evaluated configuration has one PLCore.
- DRAM, the host CPU, DMA, the AXI interconnect and the PCIe transactor of the FPGA platform: they are outside the core, and the streams and register port stand in for them.
- Overlap of weight loading with computation: this is the main reason this RTL runs slower than the paper's timing.
- Other behaviour the paper leaves open, such as formats, the instruction set, the sigmoid and the exp range reduction, is this design's own choice, as described above.

Synthesis of the full-size core and MONB is slow: 4096 multiplier units. Lint and
elaboration pass at the default size.
