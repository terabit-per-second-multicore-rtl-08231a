# Multicore successive-cancellation polar decoder (1 Tb/s class)

A fully unrolled successive-cancellation (SC) decoder for a length-1024 polar code can
decode a whole codeword in every clock cycle. To reach a terabit per second it would need
a clock above 1 GHz, with more than a hundred pipeline stages all switching at that
rate, and the power density that comes with it. This decoder takes another route. It uses
**P identical decoder cores**, each running **P times slower** than the chip interface and
each working on its own codeword. A slower core needs fewer pipeline stages to close
timing, so the clock network and the buffers shrink. The interface keeps the pin count of
a single core: a core receives its codeword over P interface cycles and sends its result
back over P cycles.

The default configuration is 4 cores, the (1024, 854) code with 5-bit channel LLRs, and 25
pipeline stages per core. At a 1200 MHz interface clock (300 MHz cores) this gives
1024 coded bits per interface cycle: 1229 Gb/s coded and 1025 Gb/s of data. A codeword
takes 108 interface cycles from its first input beat to its first output beat (90 ns).

## Frame timing at the interface

`clk` is the interface clock. A 2-bit counter, `beat_idx`, runs through 0..P-1. Core `c`
has its own input bus `llr_in[c]` of N/P LLRs: 256 LLRs = 1280 pins for the default.
In frame cycle `k` the source drives beat `k` of that core's codeword, which is LLRs
`k*N/P .. (k+1)*N/P-1`. `in_valid[c]` is sampled on beat 0 and marks the codeword valid.
All cores take their beats in the same cycles, so four codewords enter per frame.

The cores advance on a clock enable, `core_en`. It is high on the last beat of every
frame, so the core logic sees one edge every P interface cycles. In silicon this is a
divided core clock; here it is one clock with an enable, and the core-internal paths are
P-cycle multicycle paths. A codeword goes through:

| where | interface cycles |
|---|---|
| input shift register, beats 0..P-1 | P (the beat on the pins at the last beat goes straight into the holding register) |
| holding register → D core pipeline stages | D·P |
| output register, beats 0..P-1 out | P |

So beat 0 of the result leaves exactly **P·(D+2)** interface cycles after beat 0 of the
codeword entered: 108 cycles for P=4 and D=25. The output bus `out_data[c]` has ⌈K/P⌉ = 214
bits, beat 0 (data bits 0..213) first. The last beat carries two zero padding bits, and
`out_valid[c]` is high during the four beats of a valid codeword. Because all cores share
one clock phase, the latency is the lowest of the range that a free-running core-clock
phase would give.

## The unrolled SC tree

### Recursion and bit order

SC decoding of a length-M segment with LLRs `l` works in five steps:

1. Compute `f[i] = F(l[2i], l[2i+1])`.
2. Decode the first half-length segment from `f`, giving its re-encoded estimate `z`.
3. Compute `g[i] = G(l[2i], l[2i+1], z[i])`.
4. Decode the second half from `g`, giving `x2`.
5. Return `x[2i] = z[i] ^ x2[i]` and `x[2i+1] = x2[i]`.

A single bit is decided from the sign of its LLR, or is 0 when it is frozen. The frozen
mask follows the same split: the first child gets the even local positions and the second
child the odd ones. This interleaved (bit-reversed) order is used throughout. Position 0
is decoded first and position M−1 last. Frozen masks and data positions are always given
in this order.

F is min-sum: the sign is the XOR of the two signs and the magnitude is the smaller one.
G is `l[2i+1] ± l[2i]`, with the sign set by `z`, and it saturates. All LLRs are in
sign-magnitude form: a set sign bit means the LLR is negative, so bit 1 is more likely.
A zero result of G is positive.

`sc_node` is this recursion in hardware. It instantiates itself for its two children, so
a single instance at the root unrolls the whole tree at elaboration. At every node the
frozen mask decides what gets built (`mcsc_pkg::node_kind`):

| segment | condition on the mask | hardware |
|---|---|---|
| Rate-0 | all frozen | constant 0 |
| Rate-1 | nothing frozen | sign bits (hard decisions) |
| repetition | only the last position free, M ≤ 16 | `rep_decoder`: sign of the sum of all LLRs, repeated |
| single parity check (SPC) | only position 0 frozen, 4 ≤ M ≤ 16 | `spc_decoder`: hard decisions; if the parity is odd, flip the least reliable bit |
| otherwise | | F, two children, G, feedback XOR |

These shortcut decoders replace whole subtrees with a few levels of logic. For the default
code the tree has 60 split nodes. The rest are 9 Rate-0 segments, 22 Rate-1, 13
repetition and 17 SPC segments. Each shortcut returns the re-encoded segment, which is
what its parent needs for the feedback.

### Where the pipeline registers go

Each operation is given a delay in abstract units:

| operation | delay |
|---|---|
| F | 1 |
| G | 1 |
| hard decision | 1 |
| repetition or SPC of length M | log2(M)+1 |
| Rate-0 and the feedback XOR | 0 |

The decoder is one long chain of dependent operations. For the default code the chain is
TT = 254 units long (`mcsc_pkg::node_cost`). An operation from `t_s` to `t_e` is followed
by `stage_of(t_e) − stage_of(t_s)` registers, where `stage_of(t) = floor(t·D/TT)`.
Along the chain this places exactly D registers, about 10 units apart. Every node knows
its start time `T0` as a parameter, so each node works this out for itself with no global
table.

Because stages are placed by the chain, two buffers follow automatically:

- The node's input LLRs are delayed until its G step. This is the number of stages the F
  step and the first child span.
- The first child's estimate `z` is delayed until the feedback XOR.

These buffers are the large LLR and partial-sum stores of an unrolled SC decoder. Changing
D changes only how they are spread, not the function. The same RTL builds the 1-, 2- and
8-core variants with P=1/D=124, P=2/D=59 and P=8/D=13.

### Adaptive LLR precision

Channel LLRs have 5 bits: a sign and a 4-bit magnitude. Deeper in the tree, LLRs are
clamped to fewer bits, set by level in `QSCHED_ADAPTIVE`:

| segment length | LLR width |
|---|---|
| 1024 to 32 | 5 bits |
| 16 and 8 | 4 bits |
| 4 and 2 | 3 bits |
| 1 | sign only |

Each F and G output goes through an `llr_quantizer` set to the width of the level it
feeds. Narrower words become constant-zero upper bits, and synthesis removes them.
`QSCHED_FIXED5` gives a uniform 5-bit decoder for comparison.

### Code and data bits

The default frozen mask, `FROZEN_1024_854`, comes from the polarisation-weight rule.
Position `p` (decoder order, n = 10 bits) has weight
`w(p) = Σ_j p[j]·β[n−1−j]`, where `β[j] = round(1024·2^(j/4))`. The 854 heaviest
positions carry data; on equal weight the larger `p` is chosen.

The code is **systematic**: the data bits sit on the free positions of the codeword
itself. The tree returns the re-encoded codeword estimate, so `sc_decoder_core` reads the
data straight off it: data bit `j` is the codeword bit at the `j`-th free position, in
ascending order. No extra encoder is needed. Any other mask can be passed through
parameter `FZ`, together with matching `N` and `K`.

## Files

| file | contents |
|---|---|
| `rtl/mcsc_pkg.sv` | LLR type, default sizes, frozen mask, quantisation schedules, node classification, delay and stage functions |
| `rtl/mcsc_top.sv` | P slices and the beat counter / core enable |
| `rtl/input_registers.sv` | per-core beat shift register and holding register |
| `rtl/output_registers.sv` | per-core parallel-load, beat-serial output register |
| `rtl/sc_decoder_core.sv` | input clamp, root `sc_node`, data extraction, valid pipeline |
| `rtl/sc_node.sv` | recursive tree node with register placement |
| `rtl/llr_f.sv`, `rtl/llr_g.sv`, `rtl/llr_quantizer.sv` | F, G and the per-level clamp |
| `rtl/rep_decoder.sv`, `rtl/spc_decoder.sv` | shortcut decoders |
| `rtl/pipe_delay.sv` | enable-gated register chain used for every pipeline register and buffer |
| `tb/tb_sc_ref_pkg.sv` | independent reference models (see below) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mcsc_full` |

### Top-level parameters

| parameter | default | meaning |
|---|---|---|
| `P` | 4 | cores |
| `N` | 1024 | code length |
| `K` | 854 | data bits |
| `D` | 25 | pipeline stages per core |
| `FZ` | `FROZEN_1024_854` | frozen mask |
| `QS` | `QSCHED_ADAPTIVE` | per-level LLR widths |
| `OW` | ⌈K/P⌉ | output beat width |

N/P must be an integer.

## Verification

The testbenches compare against `tb_sc_ref_pkg`. It is a separate behavioural model written
with integer arithmetic and recursive functions. It contains:

- the polarisation-weight mask construction (each testbench checks that it gives the mask
  the RTL uses);
- a polar encoder and a systematic encoder;
- a BPSK channel with approximately Gaussian noise (a sum of four uniforms);
- an SC decoder that uses the same F/G/clamp/shortcut rules.

Every check is bit-exact and cycle-exact. Results:

- **Unit testbenches** drive random inputs into F, G, the clamp, both shortcut decoders,
  the delay line and the input/output registers.
- **`tb_sc_node`**: a (16,8) subtree with 3 stages and a random enable. Every output matches
  the reference exactly 3 enabled cycles after its input.
- **`tb_sc_decoder_core`**: a (128,96) core with 6 stages and a random enable. Noisy
  codewords are decoded and checked against the reference; noiseless codewords must
  return their data. The testbench also counts the codewords whose channel errors were
  corrected.
- **`tb_mcsc_top`**: 2 cores, a (64,48) code and D=5. Each output beat is checked at
  exactly P·(D+2) cycles. The testbench counts the codewords decoded per core, the
  corrected codewords and the invalid "bubble" frames, and fails if any of these counts
  is zero.
- **`tb_mcsc_p8`**: the 8-core configuration (P=8, D=13) on a (64,48) code. Outputs
  appear at exactly 8·15 = 120 cycles and all eight cores decode.
- **`tb_mcsc_full`**: the same end-to-end test with every parameter at its default
  (4 cores, (1024,854), D=25). Ten frames are checked at the 108-cycle latency. Verilator
  needs about 6 minutes to build it; the simulation itself takes under a second.

Error-rate curves down to 10⁻¹³ are far beyond RTL simulation. The testbenches check
exact agreement with the reference model instead.

To simulate, for example the full-size test (run from the directory that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/mcsc_pkg.sv tb/tb_sc_ref_pkg.sv tb/tb_mcsc_full.sv --top-module tb_mcsc_full -o sim
obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.

## What is this design's own choice

The multicore structure is the published architecture: per-core input shift registers
and output registers, an interface clock P times the core clock, the shared pin budget,
the latency P·(D+2), and the configuration sizes. The same goes for the SC recursion,
the four shortcut types, the range of LLR widths (1–5 bits) and evenly balanced pipeline
stages. The following details were not available and were chosen here:

- **F and G:** min-sum F and a saturating sign-magnitude G.
- **Per-level LLR widths.**
- **Shortcut limits:** repetition and SPC segments up to length 16.
- **Frozen set:** the polarisation-weight construction described above.
- **Register placement:** the unit delays and the `floor(t·D/TT)` placement rule.
- **Frame order and padding:** the beat order and the 214-bit output beat with two
  padding bits. In total that is 856 output pins, where the published pin budget is 854.
- **Core clock phase:** one fixed phase shared by all cores, giving the minimum latency.
- **Control signals:** the `in_valid`/`out_valid`/`beat_idx` handshake and the reset,
  which clears only the counters and valid flags.
- **Holding register:** the holding register after the input shift register.

Physical aspects are outside the RTL: the clock generator, floorplans and the 28 nm
cell-level optimisation.
