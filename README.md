# A ternary-LLM accelerator built on table-lookup matrix multiplication

This is synthesizable SystemVerilog for an accelerator that runs a ternary
language model: a BitNet-style model whose linear-layer weights are only -1,
0 or +1, with INT8 activations. It handles both prompt processing (prefill)
and token-by-token generation (decode) on one small FPGA. There are two main
ideas.

* **Matrix multiplication by table lookup, with no multipliers.** Take three
  activations a0, a1, a2. With ternary weights, every dot product of them
  with a weight group (w0, w1, w2) is one of only 3^3 = 27 signed sums. The
  engine builds all 27 sums once per group of activations, using a small
  adder tree. It then uses each 5-bit weight code as an address into that
  table. One look-up replaces three multiply-adds, and the weights are stored
  as 5-bit codes instead of 3 x 2 bits.
* **Attention that fits the memory system.** Prefill attention processes
  the prompt in reverse order, so causal masking becomes "skip the first few
  keys" and every memory read is an increasing burst. Decode attention runs
  two streaming passes, one over the K cache and one over the V cache, and
  keeps the scores on chip.

Everything else follows from keeping the look-up engine busy:

* Quantisation, dequantisation, residual add, SiLU gating and the rotary
  embedding are streamed around the engine, so their time is hidden.
* A weight buffer delivers 16 weight-code vectors per cycle.
* A small unit does RMSNorm and finds the per-token maximum that
  quantisation needs.

## Top-level organisation

`tellme_top` holds five working units, the configuration registers and a
controller:

| unit | module | job |
|---|---|---|
| weight buffer manager | `wbmu` (+ `wbmu_addr`) | store a layer's weight codes; serve 16 code vectors per cycle |
| fused linear layer | `tlmm_fuse` (`int8_quant`, `stream_fifo`, `tlmm_engine` with `tl_table`, `fp16_dequant`, `elementwise_unit`) | one ternary linear layer plus its element-wise tail |
| RMSNorm + max | `rms_max`, `chan_max_buf` | normalise tokens, record each token's absolute maximum |
| prefill attention | `rpa` | causal multi-head attention over a whole prompt |
| decode attention | `da` | one new query against the KV cache |
| registers | `cfg_regs` | command, sizes, mode bits |

The host (an ARM core in the original system) runs a decoder layer as a
sequence of commands:

RMSNorm → q/k/v linears (with RoPE on q and k) → attention → RMSNorm →
output linear (+ residual) → RMSNorm → up and gate linears (SiLU·up) →
RMSNorm → down linear (+ residual).

The controller runs one command at a time. It gives the stream ports to the
unit that owns the command and raises `irq_done` when the unit finishes.
The embedding lookup and the LM head stay on the host.

### Commands and registers

The register bus is simple: `cfg_we`, `cfg_addr[2:0]`, `cfg_wdata[31:0]`,
and combinational `cfg_rdata`.

| reg | name | meaning |
|---|---|---|
| 0 | CTRL | write: bit 0 = start, bits 3:1 = opcode (0 WLOAD, 1 LINEAR, 2 RMS, 3 PREFILL, 4 DECODE); a start while busy is ignored |
| 1 | STATUS | bit 0 busy, bit 1 done (sticky, cleared by the next start) |
| 2 | N | elements per input token; for attention, the number of tokens |
| 3 | K | output elements per token (LINEAR) |
| 4 | TOKENS | tokens in this command |
| 5 | MODE | bits 1:0 element-wise op (0 bypass, 1 SiLU(x)·y, 2 x+y, 3 RoPE); bits 3:2 projection kind (0 q/k/v/o, 1 up/gate, 2 down) |
| 6 | WSCALE | FP16 per-tensor weight scale of the layer |
| 7 | LEN | weight-load length in 768-bit beats |

### Memory-side ports

In place of the AXI masters and DDR, the top has plain valid/ready streams.
A word is 256 bits, or 16 FP16 values.

| port | LINEAR | RMS | PREFILL | DECODE |
|---|---|---|---|---|
| `s0` | activations | input tokens | queries | query |
| `s1` | second operand y (residual, up-projection or cos/sin) | – | keys | keys |
| `s2` | – | – | values | values |
| `o` | results | normalised tokens | attention outputs | attention output |

Weights arrive on `w`, 768 bits wide: three 256-bit HP ports side by side.
During prefill, `rpa_q_off/len` and `rpa_kv_off/len` tell the memory side
which bursts the current batch will read.

## Table-lookup matmul (`tl_table`, `tlmm_engine`)

Parameters: G = 3 weights per group, T = 28 tables, Q = 16 outputs per
cycle.

**Weight codes.** A weight group (w0, w1, w2) becomes the 5-bit code
`(w0+1) + 3(w1+1) + 9(w2+1)`. T = 28 consecutive codes form a 140-bit
*index vector*, which covers 84 (T·G) inputs of one output column.

**Tables.** `tl_table` entry e holds Σ_g (digit_g(e) − 1)·a_g. Each entry
is 10 bits wide: 8 + ⌈log2 3⌉. The table is written in one cycle and has Q
combinational read ports, standing in for LUT-based distributed RAM.

**Engine schedule.** For each token, and for each 84-element input slice:

1. Accept the INT8 slice and fill the T tables (1 cycle).
2. For each group of 16 output columns, read 16 index vectors from the
   weight buffer and look up T × 16 entries.
3. Sum each column over T and add it to that column's INT32 partial sum in
   the output buffer (1 cycle per group, pipelined behind the one-cycle
   weight read).

After the last slice, the finished 16-wide INT32 words go out through a
small FIFO. The engine issues a group only when the FIFO has room, so
back-pressure never loses a result.

**Rate.** One token costs `rows × (k/16 + 1)` cycles, with rows = ⌈n/84⌉.
For a 1536 × 1536 layer this is 19 × 97 = 1843 cycles per token. The
end-to-end test measures 3699 cycles for two tokens, against the 3686-cycle
bound.

## Weight buffer (`wbmu`, `wbmu_addr`)

**Address map.** The weight codes of a layer form one flat array of index
vectors with shape [x, y, z] = [3, 19, 1536]:

* x selects one of the three d_model-wide pieces of a 4096-wide matrix.
* y is the 84-element input slice (d_model padded to 1596 = 19 × 84).
* z is the output column.

`wbmu_addr` maps a request (a = first input element, b = first output
column, projection kind) to x, y, z and then to `flat = (x·19 + y)·1536 + z`:

* q/k/v/o: x = 0.
* up/gate: x = b / 1536.
* down: x = a / 1596.

**Banks.** The array is spread cyclically over 8 banks, with bank = flat
mod 8. Each bank stands for two cascaded 72-bit URAMs (144 ≥ 140 bits) that
are 3 × 4096 deep: 8 × 2 × 3 = 48 URAMs in all. A request for 16 vectors
starting at a 16-aligned flat address reads row r of every bank on port A
and row r+1 on port B. That gives 16 vectors per cycle with one cycle of
latency. An assertion checks the alignment.

**Loading.** Each 768-bit beat carries five index vectors (bits
140·j .. 140·j+139) and one FP16 RMSNorm weight (bits 767:752). The five
vectors go to five consecutive flat addresses. A layer is loaded completely
before it is used; loading and computing do not overlap.

**Capacity.** The buffer holds 98304 vectors. The largest BitNet-0.73B
layer needs 87552 (up/gate or down); q/k/v/o need 29184.

## Fused linear layer (`tlmm_fuse`)

A chain of valid/ready stages, all running at once:

```
s0 (16×FP16) → int8_quant → FIFO → tlmm_engine → fp16_dequant → elementwise_unit → o
                    ↑ 127/max[token]      ↑ index vectors    ↑ max[token]/127·wscale   ↑ s1 (y)
```

* **`int8_quant`** multiplies each value by 127/absmax of its token,
  rounds, and saturates to ±127. It then regroups 16-value words into
  84-value vectors using an 84+16-byte holding register. The last vector of
  each token is zero-padded.
* **`fp16_dequant`** multiplies the INT32 sums by absmax/127 · WSCALE.
* The absmax of each token comes from `chan_max_buf`. The quantiser and
  dequantiser read it through separate ports, because they can be working on
  different tokens.
* **`elementwise_unit`** computes one of four results from x (this layer's
  output) and y (from `s1`):
  * bypass: x
  * SwiGLU gate: x / (1 + e^(−x)) · y
  * residual: x + y
  * RoPE on consecutive pairs: (x[2t] c − x[2t+1] s, x[2t+1] c + x[2t] s),
    where y[2t] = c and y[2t+1] = s.

  Consecutive pairing keeps each pair inside one stream word. The model
  stays equivalent only if the q/k weight rows are permuted to match. The
  sin/cos values are precomputed and streamed in; the interleaving
  y = (c, s, c, s, …) is this design's choice.

## RMSNorm and per-token max (`rms_max`, `chan_max_buf`)

For each token of n values (n ≤ 4096, enough for the norm before the down
projection):

1. **Read:** store the 16-value words and sum x² in FP32.
2. **Denominator** (1 cycle): rms = √(Σx²/n + 1e-5), rounded to FP16.
3. **Write:** output (x / rms) · w, with w taken from the weight buffer's
   RMSNorm store, and keep a running absmax of the outputs.

After the last word, the absmax is written to `chan_max_buf[token]` for the
next linear layer. A token takes 2·n/16 + 1 cycles. The ε = 1e-5 is this
design's choice.

## Prefill attention (`rpa`)

The prompt of N tokens is stored in **reversed** order: address 0 holds the
newest token. Eight PEs each hold one query. Batch b loads queries from
addresses 8b … 8b+7, then streams keys and values from address 8b upward.
So:

* A batch never reads a key newer than its newest query. The part of the
  cache it needs is one increasing burst (`kv_off`, `kv_len`).
* PE p's query is p tokens older than PE 0's. PE p therefore ignores the
  first p keys of the batch, and that is the whole causal mask: no score is
  computed only to be thrown away.

Keys and values go to all eight PEs at once (multicast). Softmax is fused in
online form, with blocks of one key. Each key takes three phases:

| phase | cycles | work |
|---|---|---|
| KMAC | d_model/16 | each PE: dot products of its query with the key, per head, times 1/√d_h |
| SMAX | 16 (one per head) | m' = max(m, s); α = e^(m−m'); p = e^(s−m'); l = α·l + p |
| VACC | d_model/16 | o = α·o + p·v |

After the last key, each PE outputs o/l (PE 0 first, heads in order) and
the next batch starts. State (s, m, l, o) is kept in FP32. A batch with
`kv_len` keys and `q_len` queries takes
`2·q_len·d_model/16 + kv_len·(2·d_model/16 + 16)` cycles; the testbenches
check this.

## Decode attention (`da`)

One query against an N-token cache, in two passes of one word per cycle:

1. **K pass:** for each cached key, compute s_h = q_h·k_h/√d_h for every
   head. Store it in the on-chip score buffer (2048 × 16 FP32 entries) and
   update the running max m_h and sum l_h.
2. **V pass:** for each cached value, compute p = e^(s−m)/l and accumulate
   o += p·v.

Then o is written out. The total is `2·d_model/16·(N+1)` cycles.

## Arithmetic

All floating point is FP16 at the interfaces and FP32 inside. It is built
from combinational functions in `tellme_pkg`:

* multiply, add, divide, square root, conversions;
* exp as 2^i · a cubic polynomial for 2^f, relative error below 2e-4.

Subnormals flush to zero. Rounding is to nearest, with ties away from zero.
These are plain logic functions, not vendor floating-point cores, so a real
implementation would pipeline them. As written, each unit does its FP work
in one cycle, so the cycle counts above are those of an ideal pipeline.

## Where this departs from the published design, and what is missing

* The original was written in HLS for a Zynq UltraScale+ at 250 MHz. This
  RTL has not been through timing closure. The wide combinational FP paths
  (for example 8 PEs × 16 lanes in `rpa`) would need pipelining to reach
  that clock.
* The AXI masters, HP ports, DDR controller and ARM host are not included.
  Plain streams take their place; the `tb_tellme_top` testbench plays the
  host and the memory.
* Model sizes (d_model 1536, d_ffn 4096, 16 heads of 96) are those of
  BitNet b1.58 0.73B. The weight-code digit order, the register map, the
  bit layout of a weight beat, the FIFO depths and the buffer depths (1024
  token maxima, 2048-token score buffer) are this design's choices.
* The load format is given two ways: as ⌈(768−16)/140⌉ = 6 vectors per
  beat, and as "up to five". Six do not fit in 752 bits, so five are used.
* The original finds each token's maximum in two steps (per segment, then
  global); here a single running maximum gives the same value.
* Weight loading does not overlap computation.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one compares the
block against real-number (IEEE double) references, checks cycle counts
where a rate is known, and ends with a `TB_RESULT checks=… failures=…`
line. `tb_fp_pkg.sv` provides the FP16/FP32 ↔ real conversions they use.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top tb_rpa \
  rtl/tellme_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/tb_rpa.sv
./obj_dir/Vtb_rpa
```

List `tellme_pkg.sv` first. `tb_tellme_top` runs the whole accelerator at
full size (about a minute):

* a 1536 × 1536 weight load (5837 beats);
* RMSNorm of two tokens;
* that layer once with each element-wise op, one run with random output
  back-pressure;
* a 10-token prefill (one full and one partial batch);
* a 12-token decode.

It counts the events it must see: weight beats, max-buffer writes, each
element-wise mode, zero-padded slices, output stalls, causal skips, partial
batches and done interrupts. Any count that stays at zero is a failure.

Block testbenches use small sizes (for example 4 PEs and 2 heads of 32 in
`tb_rpa`) to stay fast; all modules take these as parameters.
