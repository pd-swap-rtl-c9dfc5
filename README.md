# PD-Swap accelerator: prefill/decode attention swapping for ternary LLMs

This is synthesizable SystemVerilog for the programmable-logic part of an
edge-FPGA accelerator that runs BitNet-style LLMs. These models use ternary
weights ({-1, 0, +1}) and int8 activations. The design follows the PD-Swap
architecture ("Prefill-Decode Logic Swapping for End-to-End LLM Inference on
Edge FPGAs via Dynamic Partial Reconfiguration").

The fabric has two regions:

- **Static region.** It holds the units that every phase of inference uses:
  - the table-lookup linear unit, with its on-chip ternary weight buffer;
  - RMSNorm with absmax search and int8 quantisation;
  - element-wise dequantisation with residual addition, SiLU or the SwiGLU
    product, and RoPE;
  - the DDR port router;
  - the control registers.
- **Dynamic region.** It holds one attention engine at a time:
  - a compute-heavy **prefill** engine, which processes the whole prompt;
  - or a bandwidth-heavy **decode** engine, which processes one new token
    against the KV cache.

The processor swaps the engine with a partial bitstream once per request,
after the last layer of prompt attention. The swap overlaps the static
region's remaining work for that layer.

```
            processor registers / irq        partial-bitstream load done
                    |                                 |
             logic_swap_ctrl ----- decouple ------> attn_rp (dynamic region)
               |  mode, bases                      | prefill_attention  (RM 0)
               v                                   | decode_attention   (RM 1)
  HP0..HP3 <-> hp_port_router <--- row requests / Q,K,V beats / output ---+
               ^  static DMA (linear mode only)
  norm_in -> rmsnorm_findmax -> int8 pack -> FIFO -> tlmm_engine -> elementwise_unit -> ew_out
                                                                                 -> rope_unit -> rope_out
                                                     (weight_buffer, tlmm_precompute)
```

## Files

| File | Role |
|---|---|
| `rtl/pdswap_pkg.sv` | Number formats, HP port structs, enums, the `exp_neg` and `sat16` helpers |
| `rtl/pdswap_top.sv` | Top: wires all units; the processor, configuration port and DDR are reached through its ports |
| `rtl/logic_swap_ctrl.sv` | Processor registers, start gating, last-layer interrupt, decouple |
| `rtl/attn_rp.sv` | The reconfigurable partition: the loaded engine runs; the other is held in reset and isolated |
| `rtl/prefill_attention.sv` | Prefill attention with NPE query PEs, reverse schedule and output FIFO |
| `rtl/prefill_pe.sv` | One prefill PE: resident query, online softmax, per-head divide |
| `rtl/decode_attention.sv` | Decode attention: two-lane K pass with online softmax, two-lane V pass, output held until the KV reads end |
| `rtl/hp_port_router.sv` | HP port mapping for linear, prefill and decode modes |
| `rtl/rmsnorm_findmax.sv` | RMSNorm, absmax search and int8 quantisation |
| `rtl/tlmm_engine.sv` | Ternary table-lookup GEMV (one token per start) |
| `rtl/tlmm_precompute.sv` | Builds the 3^G partial-sum tables for a chunk of activations |
| `rtl/weight_buffer.sv` | On-chip store of packed ternary weight indices |
| `rtl/elementwise_unit.sv` | Dequantisation, then residual addition, SiLU or the SwiGLU product |
| `rtl/rope_unit.sv` | Rotary position embedding of row pairs (CORDIC) |
| `rtl/seq_div.sv`, `rtl/seq_isqrt.sv`, `rtl/sync_fifo.sv` | Helpers: restoring divider, integer square root, FIFO |
| `tb/tb_<module>.sv` | Self-checking testbench per unit |
| `tb/tb_pdswap_top.sv` | End-to-end test at reduced size |
| `tb/tb_pdswap_full.sv` | The same test with every top parameter at its default |
| `tb/tb_workload_prefill.sv`, `tb/tb_workload_decode.sv` | Attention engines at full size on the evaluated sequence lengths |

## Number formats

- **Attention data.** Q, K, V, the outputs and RMSNorm data are signed
  16-bit Q8.8 values.
- **Scores.** Attention scores are 48-bit signed Q.16, scaled by 1/sqrt(head dim).
- **Probabilities.** These are unsigned Q1.15.
- **Output accumulators.** These are 48-bit.
- **exp.** `exp(x)` for x <= 0 is computed as 2^(x·log2 e):
  - the integer part of the exponent becomes a right shift;
  - the fraction uses a quadratic fit, accurate to 0.2 %.
- **Linear unit.** It takes int8 activations and returns int32 sums.

The source architecture computes attention and RMSNorm in fp16. Fixed point is
this design's own choice. In the tests, outputs stay within a few LSB of a
floating-point reference.

## Operation

### Registers (`logic_swap_ctrl`, word addresses)

| Addr | Name | Meaning |
|---|---|---|
| 0 | CTRL (write) | bit0 START, bit1 RECONF_BEGIN (set decouple), bit2 RECONF_END (clear decouple, count a swap), bit3 clear irq and start-rejected (done clears on the next START) |
| 1 | MODE | 0 linear, 1 prefill, 2 decode: selects the HP port mapping and the engine that START runs |
| 2 | N_TOK | prefill: prompt length; decode: context length (the query is token N_TOK-1) |
| 3 / 4 | LAYER / NLAYER | current layer and number of layers; the prefill run of layer NLAYER-1 raises irq |
| 5..8 | Q, K, V, O base | DDR byte addresses; token t's row is at base + t·2·D |
| 9 | STATUS | bit0 busy, bit1 done, bit2 irq, bit3 decouple, bit4 loaded engine (0 prefill, 1 decode), bit5 start rejected |
| 10 | SWAPS | completed reconfigurations |

START is carried out only when all of these hold:
- the region is not decoupled;
- the engine is idle;
- the loaded engine matches MODE.

Otherwise START is ignored and STATUS bit 5 is set. As a result, decode can
start only after the processor has confirmed that the decode bitstream is
loaded.

### One request

1. The processor loads the ternary weights into the weight buffer. Port
   `wb_wr_*` takes one 32-bit word: eight 4-bit indices, each coding two
   weights as `(w0+1)*3 + (w1+1)`.
2. For each layer, the static units run the linear layers, and the prefill
   engine runs attention.
3. When the last layer's prefill attention finishes, `irq` rises. The
   processor writes RECONF_BEGIN and starts the partial-bitstream load. In
   the meantime it runs the rest of the layer on the static units in linear
   mode.
4. When the load ends, `pcap_load_valid` is asserted with
   `pcap_load_rm = 1`. The decode engine comes out of reset, and the prefill
   engine's state is lost, as after a real swap. The processor then writes
   RECONF_END and switches MODE to decode.
5. Each generated token runs one decode START with N_TOK = context length.

### Prefill engine

NPE PEs (default 4) each hold one query row. Each PE keeps, per head:
- a running maximum `m`;
- a running sum `l`;
- an output accumulator `O`.

**Reverse schedule.** For a group whose highest token is t0, K/V rows are
streamed from j = t0 down to 0:
- The row for j = t0 − p also brings query t0 − p into PE p.
- PE p works only while j <= t0 − p, which applies the causal mask for free.
- After the group finishes, the next group starts at t0 − NPE.
- For NPE = 4, the K/V row fetches total N(N+4)/8 for an N-token prompt.

**Per K row.** For each K row, every active PE:
1. forms per-head scores;
2. updates `m` and `l` with the online-softmax rescale;
3. accumulates `p·V` into `O` once the V row arrives.

**Output.** A divide step forms 1/l for each head. Output rows then go through
a FIFO. Each output beat carries (token, beat, data).

### Decode engine

The decode engine uses four HP ports:
- **Q bypass.** The Q row comes over HP0 first.
- **K pass.** K rows arrive as two half rows on HP0 and HP1, one per lane.
  Lane 0 covers the first NHEAD/2 heads. The scores are stored on chip and the
  online max and sum are updated.
- **V pass.** V half rows arrive on HP2 and HP3 and are weighted by
  `exp(s − m)`.
- **Output.** The output row stays on chip until every KV read is finished.
  It is then written on HP0 to `O_base + (N_TOK−1)·2·D`.

### HP port router

| Mode | HP0 | HP1 | HP2 | HP3 |
|---|---|---|---|---|
| linear | static DMA | static DMA | static DMA | static DMA |
| prefill | Q read | K read | V read | output write |
| decode | Q read, then K lane 0, output write | K lane 1 | V lane 0 | V lane 1 |

In prefill and decode modes, static-region requests are held off (`ar_ready`
stays low).

**Port protocol.** Each port uses a simplified burst protocol, `hp_m2s_t` /
`hp_s2m_t`:
- a read request is an address plus a beat count;
- read data comes back as 128-bit beats with valid/ready;
- writes are single beats, each carrying its own address.

A request that needs two ports issues its burst on each port exactly once.

### Static units

- **`rmsnorm_findmax`** takes one element per clock (x and gain) and then:
  1. computes the mean square with a sequential divider;
  2. takes the square root and a reciprocal;
  3. normalises while tracking max |y|;
  4. emits `(y, round(127·y/max))` one element per clock.

  The int8 codes are packed 16 to a beat into a FIFO that feeds the linear unit.
- **`tlmm_engine`** works on a chunk of 16 activations at a time. For each
  chunk:
  - It first builds 8 tables of the 9 add/subtract combinations of each
    activation pair.
  - Then, for each output row, it reads one weight word per clock, makes 8
    parallel lookups and accumulates the sum.

  `done` pulses `n_rows·n_chunks + 1` clocks after the last activation beat.
- **`elementwise_unit`** computes `residual + acc·absmax·w_scale/127`, or
  SiLU of the dequantised value when `op_silu` is set, with a two-clock
  latency. SiLU uses a 257-entry sigmoid table over [-8, 8), built at
  elaboration, with linear interpolation. Its error is below 2 LSB. With
  `op_mul` set instead, the dequantised value is multiplied by the stored
  row value. SwiGLU therefore takes two passes. The gate projection runs with
  `op_silu`, and its rows are written back into the row memory. The up
  projection then runs with `op_mul`.
- **`rope_unit`** applies rotary position embedding. With `rope_en` set, the
  top holds each even row of the element-wise output and sends it with the
  next odd row as a pair. Pair i of a head (i = row/2 mod HD/2, HD = D/NHEAD)
  at position `rope_pos` turns by pos·10000^(-2i/HD). The angle is kept in
  turns as a 32-bit fraction, so reducing it modulo a full circle is just
  the wrap of the product. A half turn is removed by negating the pair. A
  16-step unrolled CORDIC then rotates the pair, and one multiply removes the
  CORDIC gain. The latency is two clocks and the error is within 2 LSB.

## Parameters (top defaults)

| Parameter | Default | Origin |
|---|---|---|
| NPE | 4 | prefill PEs, as in the reverse-schedule example of the source |
| D | 1536 | hidden size of BitNet 0.73B (model knowledge, not the source) |
| NHEAD | 16 | heads of BitNet 0.73B (model knowledge) |
| MAX_CTX | 4096 | decode context; the source evaluates up to 2048-token prompts |
| NG | 8 | parallel table lookups per clock (own choice) |
| MAX_CHUNKS | 256 | d_in up to 4096 (own choice) |
| WB_DEPTH | 393216 | one 1536×4096 projection (own choice) |
| EW_ROWS | 4096 | residual rows (own choice) |

The following are fixed: group size G = 2, 128-bit HP beats (8 elements), and
Q8.8 data.

## What follows the source and what does not

**Follows the source:**
- the static/dynamic split;
- one swap per request, triggered by the last-layer prefill interrupt and
  overlapped with static work;
- decode starts only after the load is confirmed;
- prefill with resident queries, the reverse schedule, flash-style online
  softmax, divide, and an output FIFO;
- decode with two ports for K, two for V, a Q bypass, other traffic blocked,
  and the output written after the KV reads;
- token-wise table-lookup GEMV with on-chip ternary weights;
- RMSNorm and Find Max feeding the linear unit.

**This design's own choices:**
- fixed point instead of fp16, and the exp approximation;
- the register map and the port protocol;
- the weight index encoding, G, NG and buffer sizes;
- the model dimensions;
- the two-pass decode (first a K pass, then a V pass);
- the per-row (block size 1) flash update;
- the RoPE datapath (CORDIC, row pairing, base 10000) and the two-pass
  SwiGLU, since the source only names both.

**Not built:**
- the processor software, the configuration port, DDR, and the vendor AXI
  interconnect. These are outside the fabric and appear as ports. The
  testbenches model them behaviourally.

**DFX.** The dynamic region is modelled as one wrapper (`attn_rp`) that
contains both engines and enables the loaded one. In a real DFX flow, each
engine is a separate reconfigurable module behind the same boundary.

**Not covered at all:**
- the resource and timing figures of the source, such as the 45 ms load time
  and the LUT/URAM use;
- the static DMA between DDR and the norm/linear units. Those units take their
  data on top-level ports.

## Known warnings

- **`attn_rp`: asynchronous resets.** The reset of each engine combines
  `rst_n` with the "not loaded / being loaded" condition. This is deliberate:
  it models the loss of state when a module is swapped out. Lint reports it
  as a synchronous/asynchronous mix.
- **Lint style warnings.** The remaining lint warnings are unused parameters or
  signals, and an open `busy` output.

## Simulation

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
with a watchdog. Example with Verilator:

```
verilator --binary --timing --assert -Irtl --top-module tb_pdswap_top \
  rtl/pdswap_pkg.sv tb/tb_pdswap_top.sv -Mdir obj -o sim && obj/sim
```

**End-to-end test (`tb_pdswap_top`).** It runs at D = 64 with two heads. The
test:
1. loads weights;
2. runs prefill of a 6-token prompt for two layers, checking every output
   element against a floating-point causal attention;
3. takes the last-layer irq;
4. decouples the region and tries an early decode start, which must be
   refused;
5. during the load, runs RMSNorm → linear → dequantisation → RoPE and
   checks each step against a reference;
6. completes the swap and runs one decode step over 7 tokens, checking it
   against floating point.

The test counts each mechanism and fails if any of them never occurs:
- the swap;
- linear work overlapping the decoupled region;
- the refused start;
- the irq;
- both K ports moving in the same clock;
- the Q bypass;
- static traffic held off;
- output back-pressure;
- static pass-through;
- RoPE pairs (every pair of element-wise rows must be rotated).

**Full-size test (`tb_pdswap_full`).** It runs the same sequence with every
top parameter at its default: D = 1536, 16 heads, 4 PEs, 4096-entry decode
context and a 393216-word weight buffer. It uses a 16-token prompt and 8
linear rows, and finishes in under a second of simulation time.

**Workload tests.** These run the attention engines at full size (hidden
size 1536, 16 heads) on the evaluated sequence lengths:
- `tb_workload_prefill` runs a 128-token prompt as the last of 24 layers. It
  checks every output element against floating point and checks the
  N(N+4)/8 = 2112 K/V row fetches.
- `tb_workload_decode` runs decode steps over 64, 512 and 2048 cached tokens.
  In the gap-free run, every K and V beat must move on two ports in the same
  clock.

Each takes a few seconds.

