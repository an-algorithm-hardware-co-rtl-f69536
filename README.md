# An N:M sparse Transformer accelerator in SystemVerilog

Transformer layers spend nearly all of their time in matrix multiplications.
If the weights are pruned so that **every group of M consecutive weights
holds at most N non-zeros** (N:M sparsity, here 2:8), the zeros can be
skipped in a regular way. A processing element that sees M activations
only needs N multipliers, plus a small selector that picks the N activations
matching the non-zero weights. The difficulty is that a Transformer also
multiplies two *dense* operands: Q·Kᵀ and the attention-weighted values. A
sparse-only engine would need a second array for those.

This design uses one array of processing elements (PEs) for both kinds of
product:

* **Sparse × dense** (linear layers, FFN): each PE receives a compact weight
  group (N values plus an M-bit mask) and M activations. It selects the N
  activations under the mask bits and multiplies.
* **Dense × dense** (attention): the selector is bypassed. The N multipliers
  take N consecutive dense elements from each side. The four engines
  work on four attention heads in parallel.

Around the engines sit a vector unit (bias, residual, ReLU, requantisation),
a reshuffle network, a softmax unit and three on-chip memories. An
instruction-driven controller sequences everything, and a DMA connects the
chip to external memory.

The default configuration is the 2:8 mid-size design point, "STA-Small":

| quantity | default | meaning |
|---|---|---|
| N:M | 2:8 | non-zeros per weight group |
| H | 4 | engines (also heads processed at once in dense mode) |
| R × C | 8 × 16 | PEs per engine (rows = output features, columns = tokens) |
| MACs | 4·8·16·2 = 1024 | multipliers in total |
| data / accumulator | 16 / 32 bit | two's complement, activations in Q8.8 |
| softmax | 16 lanes, 16-bit quotient, 1024-element vectors | |
| weight / input / intermediate memory | 1.25 MiB / 0.5 MiB / 0.5 MiB | 19.0 Mbit in total |

All sizes are parameters of `sta_top` and its sub-blocks. They are collected
in `rtl/sta_pkg.sv`.

## 1. Compact weight format and the non-zero selector

A group of M weights is stored as N 16-bit values followed by an M-bit mask
with one bit per position. The values are listed in ascending mask-bit order.
A group with fewer than N non-zeros leaves the upper values unused (zero). One
weight-memory row is `{mask[M-1:0], w[N-1], …, w[0]}`, i.e. 40 bits at 2:8.

The selector (`sta_nzes`) turns the mask into N one-hot masks by peeling off
the lowest set bit N times:

```
onehot[n] = rem & (-rem);      // isolate lowest set bit
rem       = rem ^ onehot[n];   // and clear it
```

Example: mask `1101` gives one-hots `0001`, `0100` and `1000`. Each one-hot
drives an AND-OR multiplexer over the M activations. The selector is purely
combinational.

## 2. The unified PE and the engine

`sta_pe` is one output-stationary PE:

* **West input:** N weights, the mask and valid/first flags. They are
  forwarded east one cycle later.
* **North input:** M activations, forwarded south one cycle later.
* **Sparse mode:** the selector picks N activations.
* **Dense mode:** activations 0..N-1 are used directly. The mask is forced to
  zero so that the selector does not toggle.
* **N-parallel MAC (`sta_nmac`):** N multiplies → product register → adder
  tree → 32-bit accumulator. The `first` flag restarts the accumulator for a
  new tile.

`sta_engine` is an R × C grid of PEs.

* **Input skew:** the engine skews its own inputs, delaying row r by r cycles
  and column c by c cycles. The user presents one *group* per cycle: all R
  weight rows and all C activation columns of the same reduction step.
* **Timing:** with G groups streamed on consecutive cycles, the accumulator
  of PE (r,c) sees group g at cycle g + r + c + 2. The whole tile is complete
  G + R + C cycles after the first group. A 2×2 tile with G = 4 dense or
  G = 2 sparse groups therefore finishes 5 and 3 cycles after the wavefront
  starts, the figures the original description gives for its example.
* **Shift-out:** each row then becomes a shift register. With `shift_i` high,
  every PE takes the value of its west neighbour. The east end `res_o[r]`
  presents columns C-1, C-2, …, 0 on consecutive cycles.

`sta_dmme` (diverse MatMul engine) holds H engines that share one north
operand, a C-bank input-memory word of C × M activations:

* **Sparse:** the whole bank word goes to every engine. Each engine has its
  own weight rows, so the H engines compute H·R = 32 output features.
* **Dense:** engine h receives elements h·N … h·N+N-1 of every bank. With
  N·H = M, one input-memory word carries N reduction steps of H different
  heads, and each engine multiplies its own head. This mapping needs
  N·H = M and is checked by an assertion.

## 3. One MatMul instruction, cycle by cycle

`sta_matmul_ctrl` runs four phases. `sta_addr_gen` turns the phase counters
into memory addresses.

| phase | cycles | what happens |
|---|---|---|
| STREAM | G | read group g: west from weight memory (sparse) or intermediate memory (dense) at `a+g`, north from input memory at `b+g`; data reach the DMME one cycle later |
| DRAIN | R + C | wavefront passes through the array |
| SHIFT | C + 1 | cycle j reads the bias word `d` and residual word `e+C-1-j`; from the next cycle the arrays shift and each column goes through the vector unit |
| FLUSH | until written | the reshuffle network writes C/N words at `f` |

**Vector unit (`sta_vector_unit`).** It works on one column of H·R lanes per
cycle, with a single pipeline stage:

```
v = acc + (bias << 8) + (residual << 8)
v = relu ? max(v, 0) : v
v = (v + 2^(s-1)) >>> s
out = saturate_16(v)
```

The residual is added before the ReLU and the shift. Bias and residual are Q8.8
values, so `<< 8` brings them to the accumulator's Q16.16 scale. A shift of
8 returns a Q8.8 result.

**Reshuffle (`sta_reshuffle`).** It collects the C columns, which arrive last
column first. It then writes word w = {lane l, n} ↦ column w·N + n. A
MatMul result stored this way is already a dense west operand for the next
MatMul, with N consecutive reduction elements per lane and per word. Y = X·W
can therefore feed Y·Kᵀ without any host work.

**Write-back to the input memory.** At the end of a residual block, the
result becomes the next layer's input. A MatMul with the `to_imem` flag
therefore writes its tile to the input memory instead, in the north-operand
layout: H·R/M = 4 words, where word w holds features w·M … w·M+M-1 of all 16
tokens. The DMA can store these words off-chip from there.

## 4. Softmax

`sta_softmax` normalises a vector of up to 64 beats × 16 elements (1024)
held in the intermediate memory, in two passes.

1. **Exponentials.**
   * Each input is a Q8.8 value x = 16·k + lo, with k = x >> 4 and lo the low
     four bits. The table gives e^(k/16) for k = -128…127, at 12 fraction
     bits and 24 bits wide. It is computed at elaboration, so no data file is
     needed.
   * The result is refined by the first-order term: e ≈ T[k] · (256 + lo)/256.
   * Inputs are clamped to [-8, 8). Two pipeline stages.
   * The exponentials go into a 64-beat buffer and into a 16-input adder
     tree. The tree feeds an accumulator that counts beats up to the
     configured length (`sta_sm_acc`).
2. **Division.**
   * Once the sum is complete, the buffer is read back one beat per cycle.
   * 16 restoring dividers (`sta_sm_div`) each have Q = 16 compare/subtract
     stages and a throughput of one division per cycle. Each computes
     q = ⌊e·2¹⁵ / Σe⌋, a Q1.15 probability.
   * The first output comes 5 + Q cycles after the last input beat. Outputs
     follow at one beat per cycle.

The max-subtraction of a numerically safe softmax is not done, as in the
source design. Scores outside ±8 saturate in the exponential.
`sta_softmax_ctrl` moves whole 64-element intermediate words in and out.

The measured error is under 0.5 % + 3 LSB of the real-valued result over the
tested range.

## 5. Memories and data layout

All memories have one synchronous read port (data the cycle after `re`) and
one write port. They are written as arrays for the tools to map to RAM.

| memory | words × width | word contents |
|---|---|---|
| weight (`sta_weight_mem`) | 8192 × 1280 | H·R rows of `{mask, w[N-1..0]}`, row h·R+r at bits (h·R+r)·40; a bias word uses the low H·R 16-bit fields |
| input (`sta_input_mem`) | 2048 × 2048 | C banks × M elements, element (c,m) at bits (c·M+m)·16; a residual word uses the low H·R fields |
| intermediate (`sta_inter_mem`) | 4096 × 1024 | H·R lanes × N elements, element (l,n) at bits (l·N+n)·16 |

## 6. Programming model

**Registers (`sta_cfg_regs`).** The registers sit on a 32-bit port:

| index | register | behaviour |
|---|---|---|
| 0 | CTRL | writing bit 0 starts the program |
| 1 | STATUS | bit 0 busy, bit 1 done; done is sticky and also drives `irq_o` |
| 2 | IADDR | instruction write pointer |
| 3..6 | IDATA0..3 | the 128-bit instruction, low word first; writing IDATA3 stores the instruction and advances IADDR |

**Instructions (`sta_pkg::instr_t`).** Instructions are 128 bits wide. The
fields, from the MSB down, are: op(4), mem(2), sparse, bias_en, res_en,
relu_en, qshift(5), a, b, c, d, e, f (14 bits each), ext(24), to_imem,
pad(4).

| op | meaning of fields |
|---|---|
| LOAD / STORE | move `c` words of memory `mem` between on-chip word `a` and external beat address `ext` |
| MATMUL | west base `a`, north base `b`, groups `c`, bias word `d`, residual base `e`, destination `f` (intermediate memory, or input memory with `to_imem`), flags as listed |
| SOFTMAX | `c` words from `a` to `b` |
| END | stop, set done |

**Execution (`sta_top_ctrl`).** The top controller fetches, decodes and
dispatches one instruction at a time. It waits for the unit's done pulse
before the next instruction, so only one unit is ever active, and an
assertion checks this.

**External port (`sta_dma`).** Traffic moves in 128-bit beats. An on-chip
word of W bits takes ⌈W/128⌉ beats (10, 16 and 8 for the three memories),
lowest bits first. Word k sits at beats `ext + k·beats …`.

**External bus handshake.** The bus has two channels:

* **Request channel:** `valid/ready`, with write flag, address and write
  data. A request is held stable until it is accepted, and an assertion
  checks this.
* **Response channel:** `rsp_valid/rdata`, with one read outstanding.

## 7. Verification

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=… failures=…` and has a watchdog. To run one with
Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/sta_pkg.sv rtl/*.sv \
          tb/tb_sta_engine.sv --top-module tb_sta_engine -o sim && obj_dir/sim
```

(List `sta_pkg.sv` first. Verilator ignores the second mention.)

**Engine, PE and DMME tests:**

* `tb_sta_engine` runs the source design's 2×2 example, with weights
  `[0 3 2 0; 0 -2 0 2]` in 1:2 and dense form, and checks the exact
  completion cycle. It also checks that the partial sum one cycle earlier
  still lacks the last group.
* It then runs random 8×16 tiles in 2:8 form.
* `tb_sta_pe` and `tb_sta_dmme` compare against integer reference products
  in both modes. `tb_sta_dmme` uses a 2-engine, 2:4 configuration.

**Softmax and vector-unit tests:** these compare against real-valued `$exp`,
exact integer division and a bit-exact vector-unit model. The softmax
latency 5 + Q is checked.

**End-to-end test.** `tb_sta_top` runs the top at its default size. It uses
a behavioural external memory with random stalls and random latency. The
program is:

1. LOAD a 2:8 weight set and a bias.
2. LOAD the activations.
3. A sparse MatMul with bias, residual and ReLU, where one product saturates.
4. A dense MatMul on the reshuffled result.
5. A softmax over 512 scores.
6. The sparse MatMul again, written back to the input memory, then stored.
7. STORE of everything.
8. END.

All 2048 stored values are compared with a reference model in the
testbench. The test also checks the stream and shift lengths, counts every
mechanism and fails if any mechanism did not occur. It takes about 4000
cycles, under a minute of simulation.

**Fault copies.** A deliberately broken copy of each block was run against
its testbench, and every testbench caught its fault.

## 8. Fit for typical Transformer models

At the defaults:

* **Softmax:** any sequence length up to 1024 fits, in multiples of 64
  elements.
* **Heads:** heads are processed four at a time.
* **Weights:** a 32-row weight tile needs K/8 weight words, at most 384 for
  K = 3072. Whole-layer weights of BERT-base (27,648 words) do not fit in the
  8192-word memory, so programs reload weights with LOAD.
* **Activations:** a 16-token activation tile needs K/8 input words, at most
  384. BERT-base's 128 × 3072 FFN activations exceed the input memory and are
  streamed in 16-token tiles.
* **Models that fit as a whole:** TinyBERT-4, DINO ViT-S/8, Transformer-base
  and a 2+1-layer shallow Transformer fit, with sequence 64–128 and
  4–12 heads.
* **Head sizes:** head sizes that are not multiples of 16 (26, 50) are
  zero-padded.

## 9. Where this RTL departs from, or goes beyond, its source

The source names these blocks and gives their function but not their
details. Everything below is this design's own choice:

* register map, instruction encoding, external bus protocol, DMA beat
  format;
* memory word layouts, the reshuffle order, the MatMul phase sequencing;
* number formats (Q8.8 data, 32-bit accumulator, Q1.15 softmax output, 12-bit
  exponential fraction, 1024-element softmax buffer, 16 softmax lanes);
* strictly sequential execution (no overlap of DMA and compute).

Further departures:

* **Dense west operand.** In dense mode it comes from the intermediate
  memory. The source's block diagram does not draw that path.
* **Write-back is a flag.** The source says a block's result is also
  written to the input memory. Here it is an explicit flag, `to_imem`, on
  the MatMul instruction that ends a block. That instruction then writes
  only the input memory.
* **No causal mask.** There is no hardware mask for decoder self-attention.
  Masked scores must be set to the most negative value, whose weight is then
  e⁻⁸ rather than 0.
* **Saturation is silent.** The vector unit's saturation flag is not reported
  to the host.
* **Host bus.** The SoC bus and the DRAM are outside the design. The top
  exposes a plain register port and a request/response memory port instead.
* **Other design points.** Only the 2:8 STA-Small point is configured. The
  tiny (1:8) and large points differ in sizes the source does not list. The
  DMME also needs N·H = M.
