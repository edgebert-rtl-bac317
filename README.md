# EdgeBERT accelerator in SystemVerilog

EdgeBERT runs ALBERT-style Transformer encoders on a small edge device under a
per-sentence latency deadline. Its key idea is sentence-level energy
optimisation.
- After the first encoder layer, an entropy-based early-exit (EE) predictor
  estimates how many layers the sentence will need.
- Knowing the remaining work and the time left, a DVFS controller lowers the
  supply voltage and clock frequency to the lowest point that still meets the
  deadline.
- The entropy is checked again after each later layer, so a confident sentence
  stops early and raises an interrupt.

Other energy features:
- Pruned embedding tables live in a non-volatile ReRAM buffer, so the device
  can sleep without reloading them.
- All-zero ("null") vectors are skipped by the multiply units.
- Attention heads whose learned span mask is entirely zero are skipped.

This repository holds a register-transfer model of the accelerator: the
processing unit (PU) for FP8 matrix products, the special function unit (SFU)
for the non-matrix parts of an encoder and for the early-exit/DVFS decisions,
the compressed scratchpads that connect them, the host interface, and
behavioural models of the analog and process-specific parts (LDO regulator,
all-digital PLL, ReRAM macro).

## System view

```
 host CPU ──AXI4-Lite──► axi_splitter ──► pu_axi_slave  ──► PU (pu_controller, pu_datapath, pu_accumulate)
                              │                                   │  ▲
                              └─────────► sfu_axi_slave ──► SFU ──┼──┼──► ldo / adpll (DVFS codes)
                                                                  ▼  │
               reram_buffer ─(embedding copy)─►  bitmask_decoder 0 / 1  ◄── bitmask_encoder
```

- **Two bit-mask decoders.**
  - Each holds a 16 KB mask buffer and a 128 KB data buffer, i.e. 8192 compressed
    vectors of N = 16 FP8 values.
  - Decoder 0 always feeds the PU's first operand and decoder 1 its second.
  - The SFU reads either one.
- **One bit-mask encoder** compresses every result vector and writes it into
  either decoder. Results therefore stay in the scratchpads from one operation
  to the next.
- **One operation at a time.** The PU and the SFU run one operation at a time,
  and the decoder ports are multiplexed.
  - Reads: the PU while it is busy, else the SFU, else host read-back.
  - Writes: the encoder first, then an embedding copy, then a host vector write.
  - A host vector write or read-back stalls the AXI write response until both
    engines are idle.
- **Sequencing is done by the host.** The host CPU issues every operation (tile
  product, residual add, layer norm, softmax, early-exit check) through
  registers and takes the interrupt. The order of operations inside an encoder
  layer is therefore software.

## Number formats

| Where | Format |
|---|---|
| Stored tensors | FP8 `{sign, exponent[3:0], mantissa[2:0]}`, value (−1)^s · 1.m · 2^(e − bias). Exponent code 0 means zero. |
| Exponent bias | Per operand, a signed 6-bit register field (`ebias_t`), so each layer's tensors can use the range they need. |
| PU accumulation | 32-bit fixed point with 16 fraction bits (Q16.16), saturating. |
| SFU arithmetic | Q8.8 (16-bit). exp/ln/reciprocal square roots use 17-entry tables of 2^(k/16) and log2(1 + k/16) with linear interpolation (see `edgebert_pkg`). |

FP8 to fixed-point conversion is exact. Fixed point to FP8 truncates the
mantissa and saturates at the largest code. Testbenches therefore compare
against real-number models with a one-mantissa-step tolerance.

## Compressed vectors

A vector is stored as an N-bit mask with one bit per non-zero element, plus its
non-zero values packed into banks 0 … popcount − 1. The decoder reads in three
stages:
1. Cycle 0 reads the mask.
2. Cycle 1 enables only the banks that hold data, so empty banks draw no read
   energy.
3. Cycle 2 scatters the values back to their positions.

This gives one dense vector per cycle with a latency of 2. The encoder does the
reverse in one registered stage.

## Processing unit

- **The VMAC array.** `pu_datapath` holds two N × N operand registers. Row i of
  `mat_in0` is A's row i; row k of `mat_in1` is B's column k, i.e. the second
  operand is stored transposed.
- **The tile product.** In cycle k every vector MAC i forms the dot product
  A[i] · B[:,k] and writes `mat_out[i][k]`. An N × N × N tile product takes N
  cycles; `out_valid` rises N + 2 cycles after `start` is sampled (one start
  cycle and one output register).
- **Null gating.** A MAC whose A row or B column is all zero is gated: its
  operand register does not toggle and its output is forced to 0. A counter
  reports the gated MAC cycles.
- **FP8 products.** `fp_vmac` multiplies the two 4-bit significands and shifts
  the product by e0 + e1 + (10 − bias0 − bias1). A 1.m × 1.m product has 6
  fraction bits, so this lands it in Q16.16.

`pu_controller` tiles a (16·mt) × (16·kt) by (16·kt) × (16·nt) product.
- **Tile layout.** Row r of tile (x, y) is decoder entry
  `base + (x·YT + y)·16 + r`. A is tiled mt × kt, B-transposed nt × kt and C
  mt × nt.
- **Per output tile (i, j).** For each k:
  1. LOAD 16 rows of A(i, k) from decoder 0 and of Bᵀ(j, k) from decoder 1, one
     row per cycle.
  2. COMPUTE the tile product.
  3. Accumulate into `pu_accumulate`; the first k clears it.
- **Drain.** After the last k, the controller drains the 16 rows. Each row is
  quantized to FP8 with the output bias, passes the activation unit (none, ReLU
  or GELU) and the encoder, and lands at `base_c + (i·nt + j)·16 + r` in the
  chosen decoder.
- **Load is not overlapped.** Loading is not overlapped with computing, so a
  k-step costs about 2 × 16 cycles.

**GELU** is computed as x · clamp(0.5 + 0.28367·x, 0, 1). This is the
piecewise-linear form of the x · sigmoid(1.702x) approximation, in Q8.8.

## Special function unit

`sfu` contains `sfu_controller`, the four compute units, the 32 KB auxiliary
buffer (1024 words of 16 × 16 bits) and the DVFS controller. The controller
multiplexes the units onto the decoder read port, the encoder write port and
the aux port.

| Operation | What it computes |
|---|---|
| Residual add (`sfu_eltwise_add`) | Decoder 0 vector + decoder 1 vector, one vector per cycle. |
| Layer norm (`sfu_layernorm`) | Pass 1 accumulates Σx and Σx² over a row of `row_vecs` vectors. The statistics step forms mean = Σx · (1/D) and var = Σx²/D − mean², then 1/σ = 2^(−log2(var)/2); no divider or square root is needed. Pass 2 writes (x − mean)/σ · γ + β with γ, β from the aux buffer (γ of vector v at `aux_base + 2v`, β at `+1`). The host supplies 1/D. |
| Softmax with span mask (`sfu_softmax`) | First loads the head's span-mask curve m(d), 128 Q8.8 values indexed by token distance d = |i − j|, from 8 aux words. Then makes three passes per row: max; Σ exp(x − max) and lse = ln Σ; finally exp(x − max − lse) · m(|i − j|). Division-free and overflow-free. The 1/√d scaling of the scores is folded into the input exponent bias. |
| Early-exit check (`ee_assessment`) | Entropy of the first `classes` logits: H = ln S − P·e^(−ln S), with S = Σ e^(x−max) and P = Σ (x−max)·e^(x−max). This equals ln Σe^x − Σ x e^x / Σ e^x with no divider. Exit if H < E_T, or in latency-aware mode when the layer has reached the predicted exit layer. |

**Null heads.** Before a softmax, the controller ORs together the head's 8
span-mask words. If they are all zero, it skips the softmax, writes `zero_len`
zero vectors to the head's context area and counts the skip.

**Early-exit prediction.** In latency-aware mode, when layer 1 does not exit,
the EE unit reads the predictor LUT at index min(H >> lut_shift, lut_len − 1).
The entry is the predicted exit layer, which goes to the DVFS controller. An
exit pulses the interrupt, which the SFU register block holds until the host
clears it.

### DVFS

`dvfs_controller` has four states:

| State | Supply and clock |
|---|---|
| STANDBY | LDO code 0 = 0.5 V retention, clock 0 |
| NOMINAL | code 12 = 0.8 V, 1 GHz |
| SEARCH | scanning the LUT |
| SCALED | the chosen V/F point |

It measures elapsed time from the sentence start with a 1 µs tick. On a
prediction P it scans the V/F LUT in the aux buffer. Each entry is a 16-bit
word `{vdd_code[15:12], freq_mhz[11:0]}`, stored from lowest to highest
frequency, one entry per cycle. The scan picks the first entry with

    freq_mhz × (T_target − elapsed_us) ≥ (P − 1) × cycles_per_layer,

or the last entry if none qualifies. It then loads the LDO and ADPLL codes.
`vf_ready` stays low for the 100-cycle settle time and until the PLL reports
lock. The SFU controller does not signal `done` for the EE operation until the
search has finished.

## Host interface

- **AXI4-Lite.** 32-bit data. Address bit 16 selects the PU (0) or SFU (1)
  register partition.
- **`axil_if`** carries the bus and assertions that a valid signal holds until
  it is accepted.
- **`axil_slave_port`** turns a partition into a simple register read/write
  port.
- **Register maps.** They are listed at the top of `pu_axi_slave.sv` and
  `sfu_axi_slave.sv`. They cover tile counts and base entries, the
  bias/activation/destination word, vector write and read-back staging, the
  embedding copy, SFU operation words, thresholds, DVFS targets,
  aux-buffer lane writes and status/counter read-back.
- **Embedding copy.** The host writes a vector index to the PU EMB register
  after EMB_PTR (byte offset of its non-zeros in the ReRAM value array) and
  EMB_DST. The ReRAM model returns the mask and the 16 bytes from the pointer
  on, already in the decoder's mask:data format, and the vector is written one
  cycle later.

## Analog and process-specific parts (behavioural models)

- **`ldo`.** Output starts at 500 mV and moves 25 mV per 1.9 ns toward
  500 + 25·min(code, 12) mV. `settled` is high at the target.
- **`adpll`.** Generates a clock of the requested MHz and raises `locked`
  50 ns after the last change. A request of 0 MHz stops the clock.
- **`reram_buffer`.** 512 KB of SLC masks (262,144 vectors) and 1536 KB of
  MLC2 values. Reads are synchronous (the cell read times are well under one
  1 GHz cycle). It has a programming port for the one-time load.

In `edgebert_top` the logic runs from the `clk` input. The ADPLL clock is a
port, so simulation does not depend on a model clock. In silicon that clock
would drive `clk`.

## Where this departs from the paper

- **Host sequencing.** In the paper, the SFU controller starts the next encoder
  itself and cancels the whole computation of a null head. Here the host issues
  each operation and must drop a skipped head's matrix products itself; the
  hardware skips the softmax and zero-fills the context.
- **Throughput.** PU operand loading is not double-buffered, which roughly
  halves its throughput. By my estimate a full 12-layer ALBERT-base pass with
  128 tokens takes about 100 ms at 1 GHz. The 50 and 75 ms targets are met only
  with an early exit.
- **Decoder 1 feeds the transposed operand.** Decoder 1 always holds the
  transposed second operand, so there is no transpose hardware. For
  attention × V the host stores V transposed.
- **Entropy sign.** The entropy follows the definition of entropy. The paper's
  printed max-trick formula has a sign that does not match it.
- **Formats.** The exact widths (Q16.16 accumulation, Q8.8 SFU), the table-based
  exp/log, the GELU approximation, the LUT layouts and the register maps are
  this design's choices.
- **LDO and ADPLL clock.** They are models; the accelerator runs from the input
  clock.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Where it matters, the
testbenches compare against real-number reference models.
- **Unit tests** cover bit-exact compression, FP8 dot products and
  accumulation, LN/softmax/entropy accuracy, DVFS LUT selection, the null-head
  skip and AXI register decoding.
- **`tb_edgebert_top`** runs the full-size design over AXI. It covers the
  embedding copies from ReRAM, a 16×16×16 matrix multiply with null gating and
  a stalled host write, result read-back checked against a model, a residual
  add, the layer-1 prediction with DVFS scaling (LDO and ADPLL follow), the
  early-exit interrupt, a null-head skip, and standby. It counts each of these
  mechanisms.

Simulate a testbench with Verilator, for example:

    verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/edgebert_pkg.sv rtl/axil_if.sv \
        tb/tb_edgebert_top.sv --top-module tb_edgebert_top
    ./obj_dir/Vtb_edgebert_top
