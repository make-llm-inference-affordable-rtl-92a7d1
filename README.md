# Hermes NDP-DIMM array: near-data GEMV, activation and neuron migration for sparse LLM inference

Large language models with ReLU-style activations are sparse at inference time. For each token,
most neurons of a fully connected layer see a zero activation, so their weights are never needed.
The active neurons are also skewed. About a fifth of them (the *hot* neurons) do most of the
work, and the rest (the *cold* neurons) fire rarely and unpredictably.

The system this RTL belongs to uses that skew to run a large model on one consumer GPU:

- Hot neurons live in the GPU's 24 GB of memory and are computed there.
- Cold neurons, which are most of the parameters, stay in eight DDR4 DIMMs.
- Each DIMM has a small *near-data processing* (NDP) core in its buffer chip. The core multiplies
  the cold neurons with the current activation vector where they are stored.
- Only activation vectors and partial results cross PCIe. Weights never do.

Two things move at run time:

- **Hot/cold split.** A host-side predictor decides per token which neurons will be active. A
  mapper swaps neurons between the GPU and the DIMMs as their activity changes.
- **Cold-neuron placement.** The cold-neuron load differs between DIMMs, and the slowest DIMM sets
  the pace. Every few tokens the host therefore moves the busiest cold neurons from the most
  loaded DIMM to the least loaded one. The weights travel over a direct DIMM-to-DIMM link, the
  *DIMM-link*.

This repository holds synthesizable SystemVerilog for the DIMM side of that system. The top,
`hermes_ndp_array`, is eight NDP cores joined by DIMM-links. Each core contains:

- a 256 KB buffer;
- a GEMV unit of 256 multipliers, each taking eight FP16 values per cycle, with a reduction-tree
  accumulator;
- an activation unit for ReLU and softmax, 256 elements wide;
- a DIMM-link controller and bridge.

The GPU, the host software (predictor, mapper, scheduler), the DDR4 controller, the DRAM and the
SerDes lanes are outside the RTL. They are described where they meet it. The testbenches contain
simple behavioural stand-ins for the memory and for the host.

## 1. What the host sees: one command stream per DIMM

Each DIMM's core is driven by a stream of NDP commands (`cmd_t` in `rtl/hermes_pkg.sv`) on a
valid/ready port. In a real system these would arrive through the DIMM's normal command
interface. Here the port is simply brought out of the top, one per DIMM (`cmd[i]`).

| op | fields used | effect | time |
|---|---|---|---|
| `OP_BUF_WR` | `buf_addr`, `data` | write a 128-bit word (8 × FP16) into the core buffer | 1 cycle |
| `OP_BUF_RD` | `buf_addr` | word appears on `rsp_data` with `rsp_valid` | next cycle |
| `OP_MAC` | `dram_addr`, `buf_addr`, `acc_idx`, `first`, `last`, `dst_addr`, `lane` | one GEMV beat (see §2) | 1 per cycle, streamed |
| `OP_RELU` | `buf_addr`, `count` | ReLU on `count` ≤ 256 elements, in place | 1 + ⌈count/8⌉ cycles |
| `OP_SOFTMAX` | `buf_addr`, `count` | softmax on `count` ≤ 256 elements, in place | 5 + ⌈count/8⌉ cycles |
| `OP_MERGE` | `buf_addr`, `data` | add 8 FP16 values into a buffer word | 1 cycle |
| `OP_MIGRATE` | `dram_addr`, `count`, `dst_dimm`, `dst_addr` | copy `count` DRAM words to another DIMM | background, 1 word per cycle |

**Computing a layer.** For one token, the host does the following:

1. Writes the layer's input vector into every core buffer (`BUF_WR`), or leaves it there from the
   previous layer.
2. Issues one `MAC` per cold neuron that the predictor expects to fire, on the DIMM that holds
   that neuron.
3. Adds the GPU's results for hot neurons into the same result vector with `MERGE`.
4. Runs `RELU` or `SOFTMAX` on the result vector.
5. Every window of tokens, issues `MIGRATE`s to rebalance.

`tb/tb_hermes_ndp_array.sv` does exactly this and is the best worked example.

**Attention.** Attention during token generation also runs on the DIMMs, with the KV cache stored
in their DRAM. It uses the same commands:

1. Each cached key row is treated as a "neuron". The scores q·kₜ are MACs against the query
   vector in the buffer.
2. `SOFTMAX` normalises the scores. The context length is up to 256 tokens per pass.
3. The weighted sum of values is a second set of MACs, with the value cache stored transposed:
   one DRAM row per head dimension, so the probabilities are the activation vector.

The host writes new K/V entries into DRAM through the DIMM's ordinary memory path, not through the
core. The per-DIMM outputs of a layer are combined with `MERGE`.

**The one ordering rule (the subtle part).**

- MACs are pipelined: up to `MQ_DEPTH` (8) weight-row requests may be outstanding to DRAM.
- Every command other than `MAC` and `MIGRATE` waits with `cmd_ready` low until all outstanding
  MACs have written their results. So a `RELU` after a run of MACs always sees the finished sums,
  and a `BUF_RD` always sees the latest value.
- MACs are *not* ordered against each other. A MAC that reads a buffer row which an earlier MAC
  is about to write can read the old value. In practice this means using the output of one layer
  as the input of the next. Put any non-MAC command between the two, for example the layer's
  `RELU`. The activation step is there anyway.
- `MIGRATE` does not wait and does not block. It runs in the DIMM-link controller while MACs
  continue, because it uses the DRAM word port, not the weight row port.

**Buffer layout.**

- The buffer is 16384 words of 128 bits, organised as `BUF_ROWS` = 64 rows of `NUM_MULT` = 256
  words (one bank per multiplier).
- A MAC's activation operand is a whole row: 2048 FP16 values, read in one cycle.
- A ReLU/softmax vector is 256 values (32 words). Its base word is rounded down to a multiple of
  32, so it never spans two rows.
- A MAC result is one FP16 value. It goes to lane `lane` of word `dst_addr`, so eight
  consecutive neurons fill one word, ready for the activation unit.

## 2. GEMV: how a neuron is computed

A *neuron* is one row of a weight matrix. Its output is the dot product of that row with the
input vector.

**One beat.**

- The core reads a whole weight row of `NUM_MULT` × 128 bits (2048 FP16 weights, 4 KB) from the
  local memory controller (`wreq_*` / `wrsp_*`). It pairs that row, word for word, with the buffer
  row named in the command.
- Multiplier *k* forms eight lane products of weight word *k* and activation word *k*.
- A balanced tree of 2047 FP16 adders reduces the 2048 products to one partial sum.
- The partial sum is added into accumulator entry `acc_idx`, or overwrites it when `first` is set.

**Longer neurons and batches.**

- A neuron longer than 2048 inputs is a chain of MACs on the same accumulator entry: `first` on
  the first beat, `last` on the final one. Each beat uses the next buffer row and the next
  weight row.
- On `last`, the finished FP16 sum is written back to the buffer.
- 256 accumulator entries let many neurons, or the same neuron for several batch entries, be in
  progress at once.

**Pipeline (`gemv_unit`).** There are three registered stages:

1. lane products;
2. tree sum;
3. accumulate.

A beat enters every cycle, and a result leaves three cycles after its last beat. Back-to-back
beats into the same accumulator entry need no stall, because the accumulator is read and written
in stage 3. In the core, a MAC's beat starts when its weight row returns from DRAM. Rows must
return in request order. The buffer row is read at that moment, combinationally, so the weight
and activation operands line up without extra storage.

**Bandwidth.** At 1 GHz the GEMV unit can take 4 KB of weights per cycle, far more than a DDR4
DIMM supplies. The weight port has valid/ready, and in practice `wreq_ready` and the return rate
set the speed. The datapath width follows the source architecture's "256 multipliers to use the
bandwidth of the centre buffer". A narrower GEMV (`NUM_MULT`) with the same behaviour is one
parameter away.

## 3. The activation unit: softmax in five cycles

`activation_unit` holds a 256-element vector and computes one of two functions.

- **ReLU** compares each element with zero and takes one cycle.
- **Softmax** is a five-step chain, one step per clock:

| stage | hardware | result |
|---|---|---|
| MAX (at capture) | comparator tree over the valid elements | *m* = max *xᵢ* |
| EXP | 256 subtractors and 256 exponential units | *eᵢ* = exp(*xᵢ* − *m*) |
| SUM | adder tree | *s* = Σ *eᵢ* |
| DIV | one divider | *r* = 1/*s* |
| MUL | 256 multipliers | *yᵢ* = *eᵢ* · *r* |

**Why the maximum is subtracted.** It keeps every exponent ≤ 1 and the sum ≤ 256, so FP16 cannot
overflow whatever the inputs. The single divider forms a reciprocal once, and the 256 multipliers
scale by it. That replaces 256 divisions.

**Partial vectors.** Elements at or beyond `len` are masked: they are excluded from the max and
the sum, and they come out as zero. A vector shorter than 256 therefore works too.

In the core, the unit is loaded with the 32-word slice containing `buf_addr`. Its output is
written back one word per cycle, only for the ⌈count/8⌉ words that hold valid elements.

## 4. FP16 arithmetic (`fp16_pkg`)

All datapaths use IEEE binary16 through one package of combinational functions.

| function | how it works |
|---|---|
| `fp16_mul` | 11 × 11-bit mantissa product, round to nearest even |
| `fp16_add` | align, add, normalise, round to nearest even with guard/sticky bits |
| `fp16_gt` / `fp16_max` | sign-magnitude compare |
| `fp16_recip` | integer division of 2²⁴ by the 11-bit mantissa, rounded |
| `fp16_exp` | computed as 2^(x·log₂e) in fixed point (see below) |

`fp16_exp` works in fixed point. *x*·log₂e is formed with a 20-bit fraction constant. The integer
part becomes the exponent. 2^f on [0,1) comes from a cubic polynomial with coefficients 0.6956,
0.2262 and 0.0781 (scaled by 2²⁰). Its relative error is below 10⁻³, less than half an FP16 ulp
after rounding in most cases.

Simplifications, deliberately:

- Subnormal inputs and results are flushed to zero.
- Overflow gives a signed infinity.
- No NaN is produced.

None of these cases arise in the softmax after max subtraction, or in well-scaled activations.

The reduction tree adds in a fixed pairwise order. Its FP16 sum therefore differs from a
sequential sum in the last bits. The testbenches use values whose sums are exact, or compare
against a bound.

## 5. The DIMM-link: moving neurons between DIMMs

**Topology.** The eight bridges form a chain. DIMM *i* connects to *i*−1 and *i*+1 through a link
in each direction. The source architecture's link is 8 lanes × 25 Gb/s, which is 200 bits per
cycle at the core's 1 GHz. The RTL therefore moves one 200-bit flit per link per cycle. The
SerDes lanes that would carry it are not part of the RTL.

**Flit layout** (`flit_t`):

- `data` [127:0]: one DRAM word;
- `addr` [159:128]: destination word address;
- `dst` [163:160] and `src` [167:164]: DIMM ids;
- `last` [168];
- padding up to 200 bits.

Payload is 128 of the 200 bits, so a migration moves 16 GB/s of weights over a 25 GB/s link.

**Bridge (`dimm_link_bridge`).**

- Three inputs: from the left, from the right, and from the local controller.
- Three outputs: to the left, to the right, and eject to the local controller.
- Each output is a one-flit register with valid/ready.
- Routing is by comparing `dst` with the bridge's own id: lower goes left, higher goes right,
  equal is ejected.
- When two inputs want the same output, traffic already on the chain beats local injection. On
  the eject output, left beats right beats local.

This gives the usual property of such chains: a flit in flight is never held back by new
injections, so a migration that has started keeps one flit per cycle. Each intermediate DIMM adds
one cycle.

**Controller (`dimm_link_ctrl`).**

- **Send side.** On `MIGRATE` it reads `count` consecutive words from local DRAM through the word
  port (`lrd_*`), up to `FIFO_DEPTH` (8) in flight. Each word becomes a flit to (`dst_dimm`,
  `dst_addr` + k), and the last one is marked.
- **Receive side.** Every flit ejected at this DIMM is written to local DRAM (`lwr_*`), and
  `rx_words` is incremented.

With a DRAM port that answers every cycle, 64 words leave in 69 cycles.

**What decides when to migrate.** The host. Over a window of five tokens it counts how often each
cold neuron fired and sums the counts per DIMM. It sorts the DIMMs by load and pairs the most
loaded with the least loaded, the second with the second-last, and so on. It then moves the most
active neurons from the heavier to the lighter DIMM of each pair until they balance. Because the
pairs are disjoint, their transfers use different stretches of the chain.

The end-to-end testbench contains this algorithm in its host model and checks that the heaviest
DIMM's load drops.

## 6. Parameters and sizes

| parameter | default | where | source |
|---|---|---|---|
| `NUM_DIMMS` | 8 | top | source architecture (8 NDP-DIMMs) |
| `NUM_MULT` | 256 | top, core, GEMV | source architecture |
| lanes per multiplier | 8 FP16 (128 bits) | package | source architecture |
| buffer | 256 KB = `NUM_MULT` × `BUF_ROWS` (64) × 16 B | core | source architecture (size); banking is this design's |
| `ACT_N` | 256 | core, activation unit | source architecture (256 exp / add / mul units) |
| `ACC_ENTRIES` | 256 | core, GEMV | this design |
| `MQ_DEPTH` | 8 outstanding weight rows | core | this design |
| `FIFO_DEPTH` | 8 | DIMM-link controller | this design |
| flit | 200 bits per cycle | package | source architecture (8 × 25 Gb/s at 1 GHz) |
| DRAM word address | 32 bits × 16 B = 64 GB per DIMM | package | this design (covers 32 GB DIMMs) |

**Capacity.** The models the system targets are OPT-13B/30B/66B, LLaMA2-13B/70B and Falcon-40B.
At FP16 they need 26 to 138 GB of weights, which fits the 24 GB of the GPU plus 8 × 32 GB of
DIMMs. The widest FFN input among them, 36 864 values (72 KB), fits the 256 KB buffer. Batches of
up to 16 need at most 16 accumulator entries per neuron.

## 7. Where this RTL departs from, or adds to, the source architecture

- **Multipliers are parallel, not bit-serial.** The source describes each multiplier both as
  bit-serial and as computing eight FP16 values at once. Here each is eight parallel FP16
  multipliers taking one word pair per cycle.
- **Beat grouping.** All 2048 products of a beat belong to one neuron. The source does not say how
  products are grouped for batching.
- **Invented interfaces.** The command set, its encoding, the ordering rule, the accumulator file,
  the flit layout, the chain topology and the arbitration are this design's own. The source gives
  none of them.
- **Memory ports.** The local memory controller is not modelled as RTL. The core expects:
  - a weight port that returns a full 4 KB row per request, in order;
  - a word port for migrations.
  
  A real DDR4-3200 controller would need a gearbox that assembles rows from bursts. That belongs
  to the controller side.
- **FP16 details.** Rounding, subnormal handling and the exp approximation are this design's
  choices (§4).
- **Chain ends.** They are left open.
- **Left in software.** The predictor (4-bit state per neuron, correlation table, threshold test)
  and the offline ILP placement stay on the host, as in the source. They are not RTL.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

| testbench | size | what it checks |
|---|---|---|
| `tb_fp16_pkg` | — | ~99k random and corner cases of mul/add/compare/recip/exp against real arithmetic, rounded |
| `tb_gemv_multiplier` | 8 lanes | random words, every lane product |
| `tb_reduction_tree` | N = 64 | exact integer sums; random values against a bound |
| `tb_ndp_buffer` | 4 × 8 | lane-enabled writes, row reads against a model |
| `tb_gemv_unit` | 4 multipliers | multi-beat neurons, interleaved entries, 3-cycle latency |
| `tb_activation_unit` | N = 256 (full) | ReLU exact in 1 cycle; softmax within 1 % in 5 cycles, masking |
| `tb_dimm_link_bridge` | 8-DIMM chain | random routing, hold rules, priority of through traffic, 1 flit/cycle |
| `tb_dimm_link_ctrl` | — | migrations with a looped-back bridge; 64 words in 69 cycles |
| `tb_ndp_core` | 4 multipliers | every command; weight-port stalls; commands waiting for MACs |
| `tb_hermes_ndp_array` | 4 DIMMs × 4 multipliers | two token steps plus window remapping (end-to-end run) |

**End-to-end run.** `tb_hermes_ndp_array` counts the mechanisms and fails if any of them never
happened:

- stalls of the weight port;
- commands held for outstanding MACs;
- merges;
- ReLUs and softmaxes;
- migrations;
- flits forwarded through an intermediate DIMM;
- injections held back by through traffic.

**Not simulated at full size.** The array at its default size was never simulated: 8 DIMMs ×
256 multipliers, i.e. 16 384 FP16 multipliers and 16 376 FP16 adders. Each core is a distinct
specialisation because its DIMM id is a parameter. The Verilator model is therefore over a
gigabyte of generated C++ and does not build in reasonable time on a workstation. Even 8 DIMMs ×
32 multipliers takes more than ten minutes to compile.

The largest configurations simulated are these:

- the end-to-end run at 4 DIMMs × 4 multipliers with a 32-wide activation unit;
- the activation unit alone at its full width of 256;
- the DIMM-link bridge in an 8-DIMM chain.

Every module lints and elaborates at its default parameters.

**Faulted copies.** Each module has been run against a deliberately broken copy, and its
testbench fails on it. Examples: truncation instead of rounding; the wrong lane's activation; a
missing `first`; multiplying by the sum instead of the reciprocal; injection given priority; a
MERGE that overwrites.

## 9. Simulating and changing it

With Verilator 5, for example for the end-to-end testbench:

```
verilator --binary --timing --assert -j 0 \
  rtl/hermes_pkg.sv rtl/fp16_pkg.sv tb/tb_util_pkg.sv tb/tb_hermes_ndp_array.sv \
  -y rtl -y tb --top-module tb_hermes_ndp_array -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace the testbench name for any other. The simulator has two states, and anything not reset
starts random: `+verilator+rand+reset+2` exercises that.

**Where to make common changes.**

- **Sizes.** Override the top's parameters. `NUM_MULT` and `BUF_ROWS` together set the buffer
  size. `ACT_N` must be a power of two, a multiple of 8 and at most `NUM_MULT` × 8.
- **Command set.** Extend `op_e` and `cmd_t` in `hermes_pkg`, then the decoder in `ndp_core` (state
  `S_IDLE`).
- **Number format.** Change everything through `fp16_pkg`. The datapaths only call its functions.

**Lint notes that stand.**

- Verilator reports `SYNCASYNCNET` on `rst_n`. Control flops use an asynchronous active-low reset,
  and the assertions sample `rst_n` synchronously.
- Verilator also reports unused bits: flit padding, and header bits the receive side does not
  need.
- The large data arrays (buffer, accumulator, pipeline registers) are deliberately not reset.
