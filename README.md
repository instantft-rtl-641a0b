# Skip-LoRA fine-tuning core with a quantized forward cache

This is an accelerator that fine-tunes a small pre-trained CNN on the device where it runs,
in well under a second per ten epochs. It is an RTL rendering of the InstantFT core, which was
published as an FPGA design for the Kria KV260 board. Where this RTL departs from that
description is listed near the end, under "Where this differs". It is built around two ideas.

**Skip-LoRA.** The frozen network stays as it is. Five small low-rank adapters (rank r = 4)
are added. Adapter *i* takes the activation x^i of layer *i* (x^0 is the input image) and
adds a correction straight onto the final logits:

    x5 = x̂5 + Σ_{i=0..4} B_i · (A_i · vec(x^i))        A_i: 4 × c_in,  B_i: 10 × 4

No adapter feeds another layer, so the training gradient never passes back through the
frozen network. The loss gradient dx5 at the logits is all that any adapter needs:

    dB_i = dx5 · h_iᵀ      dh_i = B_iᵀ · dx5      dA_i = dh_i · x^iᵀ      (h_i = A_i x^i)

All five adapters can therefore run their forward pass, backward pass and update at the
same time.

**Forward cache.** The frozen network never changes, so x^1…x^4 and the base logits x̂5
are the same every epoch for a given image. The first time an image (dataset index *j*) is
seen, the core runs the base network. It then stores those 1790 values in external memory,
compressed to 4-bit NormalFloat (NF4). In every later epoch the core reads back and expands
the entry instead of running the network. Per image, a whole training step drops from about 51 k
cycles to about 4.3 k.

## The network

A LeNet-5-like model; activation sizes per sample:

| tensor | shape | values | produced by |
|---|---|---|---|
| x0 | 1×28×28 | 784 | input buffer |
| x1 | 6×14×14 | 1176 | Conv 5×5 (pad 2) + ReLU + MaxPool 2×2 |
| x2 | 16×5×5 | 400 | Conv 5×5 (no pad) + ReLU + MaxPool 2×2 |
| x3 | 120 | 120 | FC 400→120 + ReLU |
| x4 | 84 | 84 | FC 120→84 + ReLU |
| x̂5 | 10 | 10 | FC 84→10 (logits) |

- A cache entry holds x1, x2, x3, x4 and x̂5: 1176 + 400 + 120 + 84 + 10 = 1790 values.
- The adapters have 4·(784+1176+400+120+84) + 5·40 = 10456 trainable parameters.

## Number formats

- Activations, probabilities and adapter deltas are Q8.16: 24-bit signed, 16 fraction bits.
- Weights, adapter parameters, gradients, dx5 and the learning rate η are Q4.12: 16-bit signed.
- A multiply-accumulate forms the full product of a Q8.16 and a Q4.12 value, which has 28
  fraction bits. It keeps that in a 48-bit accumulator and shifts right by 12 at the end.
  Then it saturates.
- The base network truncates toward −∞.
- The adapter gradient and update paths round half up. Without rounding, the small
  gradient steps of a batch of 20 are biased.

`rtl/instantft_pkg.sv` holds these types, the sizes above, the NF4 tables and the
saturate/multiply helpers.

## One SGD step, sample by sample

One `start` pulse processes the BATCH = 20 samples in the input buffer. It then applies one
update and pulses `done`. For each sample *b* the controller in `instantft_core` steps
through these phases, which never overlap:

1. **LOOK.** `fwd_cache_ctrl` keeps one presence bit per dataset index. The sample's index
   selects a bit. It also gives the entry's byte address: `cache_base + idx·1008`.
2. **Miss.**
   - `conv_mp` runs twice and `fc_layer` runs three times, filling the x1…x4 buffers and the
     x̂5 registers.
   - `nf4_quant` then writes the entry to memory, and the presence bit is set.
   - The sample continues with the full-precision values it has just computed.
3. **Hit.** `nf4_dequant` reads the entry and expands it into the same buffers and registers.
4. **Adapters.**
   - The five `lora_unit` instances run their forward pass together: 784+10+2 cycles for the
     longest.
   - `delta_add` forms x5. `softmax_lut` turns x5 into p, which is reported on `out_p` with
     `out_valid`.
5. **Loss and gradients.**
   - `celoss` gives dx5 = (p − onehot(label)) / 20, rounded to Q4.12.
   - dx5 is fed to all five adapters, which add this sample's gradient into their gA/gB
     buffers.

After the 20th sample the five adapters perform `A −= η·gA` and `B −= η·gB` together, and
clear gA and gB.

Measured cycle counts at the default sizes:

| case | sample start to probabilities | whole step, per image | what dominates |
|---|---|---|---|
| cache miss | 49 304 | 50 903 | conv1: 784 pixels × 26 cycles; conv2: 100 × 151; FC1: 15 groups × 400 + 120 |
| cache hit | 3 042 | 4 290 | dequantize 1790 values at one per cycle; adapter forward and backward passes, about 800 cycles each |

- The first column comes from the full-size testbench. The second comes from the workload
  testbench, from `start` to `done`. It includes the backward pass and the per-batch update,
  and excludes host loading.
- At 200 MHz, ten epochs over 1024 images project to
  (1024 · 50 903 + 9 · 1024 · 4 290) / 200 MHz ≈ 0.46 s: one epoch of misses, then nine of
  hits.

## The forward-cache entry format

The NF4 quantizer needs a per-block scale. This design fixes the layout as follows:

- The 1790 values are cut into 28 blocks of 64. The last block holds 62.
- Each block stores its absolute maximum `amax` as a 32-bit unsigned number. It has the raw
  bit pattern of the Q8.16 magnitude.
- Value *v* gets the 4-bit code *c* whose level `NF4[c]·amax` is nearest.
  - The quantizer finds *c* without a divider. It counts how many of the 15 midpoints
    `MID[k]·amax` lie below *v*.
  - The 16 levels and 15 midpoints are stored scaled by 2^15, so a compare is a multiply
    and a shift.
- Dequantization computes `(NF4[c] · amax) >>> 15`.

Layout in memory, 128-bit words:

| words | contents |
|---|---|
| 0 … 55 | codes: 32 codes per word, value *n* at word n/32, bits 4·(n mod 32) +: 4 |
| 56 … 62 | scales: 4 per word, block *k* at word 56 + k/4, bits 32·(k mod 4) +: 32 |

- An entry is 63 words, or 1008 bytes, against 7160 bytes in FP32: 7.1× smaller.
- 1024 images need 1.03 MB.
- The quantizer writes the code words as soon as 32 codes are ready, and the scale words
  last.
- The dequantizer reads the scales first, then the code words. It fetches the next word while
  writing out the current one.

## Memory port

Quantizer and dequantizer share one 128-bit port:

- `mem_req` is held together with `mem_we`, `mem_addr` and `mem_wdata` until `mem_gnt`.
- Read data returns in order on `mem_rvalid` and `mem_rdata`.
- The core asserts this rule: a request that is not granted must stay unchanged.

In a system this port sits behind an AXI manager. The AXI-Lite register file, the
interconnect and the interrupt are left to the wrapper. The `done` pulse is the interrupt
source.

## Blocks

| module | role | timing |
|---|---|---|
| `conv_mp` | Conv K×K + bias + ReLU into a one-row line buffer and a 2×2 window, then MaxPool. COUT channels in parallel; kernel taps one per cycle. | HO·WO·(CIN·K²+1) + HP·WP·COUT + 1 |
| `fc_layer` | dense layer, PO = 8 outputs per group, one MAC lane each, optional ReLU | ⌈NOUT/PO⌉·NIN + NOUT + 1 |
| `lora_fwd` | h = A x (4 lanes, one input per cycle), then one delta output per cycle | CIN + COUT + 2 |
| `lora_bwd` | per sample: dh and gB += dx·hᵀ over COUT cycles, then gA += dh·xᵀ over CIN cycles; per batch: SGD update | CIN+COUT+2 / CIN+COUT+1 |
| `lora_unit` | A, B, gA and gB arrays with one `lora_fwd` and one `lora_bwd`; host load and readback | as above |
| `delta_add` | x̂5 + Σ deltas, saturating | combinational |
| `softmax_lut` | subtract max; exp table: 1024 entries, step 1/64; sum; reciprocal table: 4096 entries, step 1/256; COUT multiplies | COUT + 2 |
| `celoss` | dx5 = (p − onehot)·round(2^16/BATCH), brought to Q4.12 | combinational |
| `nf4_quant` / `nf4_dequant` | cache entry write / read, described above | about 3.7 k cycles plus memory stalls / about 1790 plus two memory round trips (two words in flight) |
| `fwd_cache_ctrl` | presence bits, index range check and entry address | combinational lookup, one-cycle set and clear |
| `act_ram` | buffer with one synchronous write port and one combinational read port | — |
| `instantft_core` | the controller and the wiring described above | — |

- Both lookup tables are computed at elaboration:
  - exp(−k/64) by repeated multiplication with round(2^16·e^(−1/64));
  - 1/s at the centre of each step.
- The original description specifies lookup tables but not their sizes or contents.

### Host loading

All loads happen while `busy` is low.

- **Input images:** `in_we/in_addr/in_data`. Sample *b*, pixel *p* is at b·784 + p, in
  Q8.16.
- **Labels and dataset indices:** `smp_we/smp_sel/smp_label/smp_idx`.
- **Weights and adapters:** `prm_we/prm_sel/prm_addr/prm_data`.
  - `prm_sel` 0–4 selects conv1, conv2, fc1, fc2, fc3.
  - Conv weight (oc, ci, ky, kx) is at ((oc·CIN+ci)·K+ky)·K+kx. Bias *oc* is at
    COUT·CIN·K² + oc.
  - FC weight (o, i) is at o·NIN + i. Bias *o* is at NOUT·NIN + o.
  - `prm_sel` 5–9 selects the adapter on x0…x4. A(k, i) is at k·c_in + i. B(o, k) is at
    4·c_in + o·4 + k.
- **Trained adapters:** read back on `lrd_sel/lrd_addr → lrd_data`, with the same map.
- **Cache:** `cache_clear` forgets every entry. Use it when the dataset changes.
  Indices ≥ N_IDX (1024) are never cached; such samples always run the base network.

## Where this differs from the original design

- **One sample at a time.**
  - The original convolution computes several samples and several channels per cycle.
  - Here the convolution has one lane per output channel and handles one sample at a time.
  - The FC layers have 8 output lanes.
  - The original gives no unroll factors. The projected 0.46 s for ten epochs is about
    1.3× the 0.36 s reported for the FPGA build.
  - The hit epochs are about 40% of the total. They are limited by one dequantized value
    per cycle and by the adapters taking one input element per cycle.
- **Cache format.** The NF4 block size (64), scale format (32-bit) and entry layout are
  this design's own choices. The original reports 7.2× compression; this layout gives 7.1×.
- **Gradient accumulation.**
  - Gradients are summed over the 20 samples and applied once per batch.
  - The 1/20 of the mean loss is folded into dx5.
  - Only x0 and x1…x4 of the current sample are kept. dA and dB are therefore accumulated
    sample by sample, not formed as batch matrices.
- **Choices left open, and what is left out.**
  - ReLU, padding and rounding are not specified by the source description and were
    chosen here.
  - The loss value itself is not computed; nothing uses it.
- **Memories.** All are plain arrays with combinational reads. Mapping them to block RAM
  would need a registered read and one more pipeline stage in each reader.
- **SVHN.** The 3×32×32 SVHN variant would need:
  - conv1 with CIN = 3, 32×32 and no padding;
  - a first adapter on 3072 inputs;
  - N_IDX = 73257.

  The first two are fixed in the package and the core. N_IDX is a parameter.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. With plain Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/instantft_pkg.sv rtl/conv_mp.sv \
        tb/tb_conv_mp.sv --top-module tb_conv_mp -o sim && ./obj_dir/sim

For `tb_lora_unit`, also list `lora_fwd.sv` and `lora_bwd.sv`. For `tb_instantft_core` and
`tb_workload`, list every file in `rtl/` and `tb/dram_model.sv`.

| testbench | what it checks against an independent model |
|---|---|
| `tb_conv_mp` | every pooled output of a reduced layer, and the cycle count |
| `tb_fc_layer` | every output, with and without ReLU, and the latency |
| `tb_lora_fwd` | h and every delta, and the latency |
| `tb_lora_bwd` | gA and gB after several accumulated samples, and the updated A and B |
| `tb_lora_unit` | host load and readback, and forward, gradient and update through the shared buffers |
| `tb_delta_add` | random sums, including saturation |
| `tb_softmax_lut` | probabilities against the real softmax; sum ≈ 1; argmax |
| `tb_celoss` | dx5 for random p and labels |
| `tb_nf4_quant` | codes and scales written to memory against a reference quantizer, with random grant stalls |
| `tb_nf4_dequant` | expanded values against the reference, with random stalls and latency |
| `tb_fwd_cache_ctrl` | presence bits, set, clear, range and entry addresses |
| `tb_act_ram` | write and read-back |
| `tb_instantft_core` | the whole core at default sizes (described below) |
| `tb_workload` | a scaled-down dataset run: 60 images in 3 batches over 3 epochs. All misses, then all hits; one entry per image at its address; identical cached logits across epochs; busy cycles and the ten-epoch projection |

`tb_instantft_core` runs the whole core at default sizes, with 2.7 M cycles and about 250 k
checks:

- **Setup.** Random weights, 20 random images, A random and B zero, η = 0.1, and a DRAM
  model with random stalls.
- **Runs.** Three epochs, then a cache clear and one more step.
- **Checks.**
  - On a miss, x1…x4 and x̂5 must equal a bit-exact reference of the base network.
  - On a hit, the buffers must equal the NF4 decode of the entry in memory. That decode
    must lie within the NF4 rounding bound of the reference.
  - Every probability vector must match softmax(x̂5 + Σ B A x), computed in real
    arithmetic.
  - After every step, the adapters read back must match a real-valued SGD step within a
    few LSBs.
  - A hit must take under a tenth of the cycles of a miss.
  - The mean probability of the true label must rise over the epochs.
- **Events counted.** It counts misses, hits, an index that is never cacheable, cache writes
  and reads, memory stalls, updates and the clear. Each must occur at least once.
