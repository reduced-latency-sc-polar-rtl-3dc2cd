# Look-ahead 2-parallel SC polar decoder

Successive-cancellation (SC) decoding of a polar code of length N = 2^L is
sequential by nature: in the usual schedule every stage of the decoding
graph alternates between a min-sum update and a "partial-sum" update
`(-1)^u * a + b` that has to wait for an earlier decision `u`. That costs
2(N-1) clock cycles per codeword and leaves at most half of the processing
elements busy in any cycle.

This RTL implements the look-ahead architecture described in *Reduced-Latency
SC Polar Decoder Architectures* (C. Zhang, B. Yuan, K. K. Parhi). The idea is
simple: once both LLRs `a` and `b` of a node are known, the partial-sum update
can only have two results, `b + a` (u = 0) and `b - a` (u = 1). A processing
element therefore computes the min-sum value **and both candidates** in the
same cycle. The right candidate is picked later by a multiplexer, once `u` is
known. Every stage then needs one activation where it used to need two. A
codeword takes N-1 cycles instead of 2(N-1). Two codewords are interleaved on
one array of N/2 PEs, so a pair of codewords comes out every N cycles.

All RTL is SystemVerilog-2017 in `rtl/`, and the self-checking testbenches are
in `tb/`.

## Code convention

* Channel input: `llr_in[j]` for j = 0..N-1. Each is a Q-bit two's-complement
  LLR, log P(y|0)/P(y|1), so a positive value favours bit 0.
* Code: x = u · F^{⊗L}, with F = [1 0; 1 1], all in natural order with no
  bit-reversal. Node sizes halve at each stage. A node with inputs
  `a[0..M-1]` pairs `a[p]` (first half) with `a[p+M/2]` (second half):
  * `f[p] = sign(a[p])·sign(a[p+M/2])·min(|a[p]|, |a[p+M/2]|)`
  * `g[p] = a[p+M/2] + (-1)^β[p] · a[p]`

  Here β holds the partial sums of the left child's decisions, that is,
  that child's re-encoded bits. The published figures draw the same graph
  with the channel inputs in bit-reversed order. Permute `llr_in` if your
  encoder uses x = u·B_N·F^{⊗L}.
* Decision: `u = 0` if the LLR is ≥ 0, otherwise `u = 1`. Frozen bits
  (`frozen[i] = 1`) are forced to 0.
* Stages are numbered as in the source architecture. Stage 1 sits at the
  channel and has N/2 PEs per codeword. Stage L sits at the decisions and has
  one PE.

## The look-ahead schedule

One activation of stage s works on all N/2^s PEs of a node. Each PE
delivers three values (`f`, `g0`, `g1`). One codeword is a pre-order walk
over the stage tree:

```
visit(s):  activate stage s
           if s < L: visit(s+1) on the f values          (left child)
                     visit(s+1) on the selected g values (right child)
```

That is 2^L - 1 = N - 1 activations. For N = 8 the stages run in the order
1 2 3 3 2 3 3. A stage-L activation decides two bits in one cycle. The sign
of `f` gives u(2i-1), which picks `g0` or `g1`, whose sign gives u(2i).

The controller (`la_scheduler`) needs no stack. After a stage s < L comes
stage s+1, fed with `f`. After the stage-L cycle that decided bit pair i
comes stage `L - trailing_ones(i)`, fed with candidates chosen by the partial
sums of the 2^(trailing_ones(i)+1) bits just completed.

### Two codewords on N/2 PEs

Stage 1 needs all N/2 PEs. From stage 2 on, one codeword never uses more than
N/4 of them. The two codeword slots A and B therefore share the array like
this:

| cycle | slot A | slot B |
|---|---|---|
| 1 | stage 1 on PEs 0..N/2-1 | — |
| 2 | — | stage 1 on PEs 0..N/2-1 |
| 3..N | stages 2..L, PEs 0..N/2^s-1 | the same stages, PEs N/4..N/4+N/2^s-1 |

For N = 8 this gives, per cycle, the numbers of active PEs 4,-,2,1,1,2,1,1
for slot A and -,4,2,1,1,2,1,1 for slot B. That matches the source
architecture's table. Slot A waits one cycle after its stage 1. This costs
one cycle on the N-1 of a single codeword. In exchange, the second codeword
comes at no extra cost.

## Merged processing element (`merged_pe`)

One unit computes the min-sum value and both candidates with a single
adder-subtractor:

1. Convert both inputs to sign and magnitude (`|x|` of -2^(Q-1) is 2^(Q-1),
   held in Q unsigned bits).
2. A Q-bit adder-subtractor (`type1_pe`) gives S = |in1|+|in2| and
   D = |in1|-|in2| in parallel. Its borrow-out is set exactly when
   |in1| < |in2|.
3. The borrow selects the smaller magnitude for the min-sum output. The
   sign of that output is the XOR of the input signs.
4. A crossing switch, steered by "signs differ", routes S to the candidate
   whose operands have equal signs and D to the other one.
5. Both candidates take the sign of `in1`. D is used as a two's-complement
   number, so `sign(in1)·D` is already the correct mixed-sign sum and no
   absolute value is needed.

The result is exactly `out2 = in1 + in2` and `out3 = in1 - in2`, modulo 2^Q.
Nothing saturates. All arithmetic wraps, as a plain Q-bit adder does. Choose Q
so that the LLR range times N fits, or accept the wrap. The testbenches model
the same wrap-around.

The adder-subtractor is built from 1-bit cells (`half_addsub` at bit 0,
`full_addsub` above). Each cell shares the X⊕Y term between the sum and the
difference. It also keeps a separate carry chain and borrow chain.

## Partial sums on the fly (`igc`)

To select candidates, a stage needs β: the XOR combinations of decisions
already made. The input generating circuit builds them incrementally, like a
pipelined real-valued FFT with XOR in place of the butterflies:

* U_1 takes the pair (u(2i-1), u(2i)) and outputs `{u(2i-1)^u(2i), u(2i)}`.
* U_k consists of U_(k-1), a store RAM_k of 2^(k-1) bits and 2^(k-1) XOR
  elements. A toggle c_k flips each time U_(k-1) delivers:
  * On the first delivery (c_k = 0), the left half's sums go into RAM_k.
  * On the second (c_k = 1), U_k outputs `{RAM_k ^ new, new}`, the sums of the
    whole 2^k-bit block.

With L-1 units, each IGC holds N/2-2 storage bits and N/2-1 XOR elements.
The decided pair is registered at the IGC input, and the unit outputs are
combinational from that register. β is therefore valid in the cycle after
the decision, which is exactly the cycle in which the schedule above needs
it. The unit that delivers last in that cycle is U_(trailing_ones(i)+1). Its
output selects the candidates of stage `L - trailing_ones(i) - 1`. Each slot
has its own IGC.

## LLR storage (`llr_store`)

Each slot keeps, for every stage t < L, the N/2^t values `f`, `g0` and `g1`
from its last activation, which is 3·Q·(N-2) bits per slot. When stage s is
about to run, the store builds its inputs from bank s-1: the `f` values, or
for a right child `g1[j]` where β[j] = 1 and `g0[j]` otherwise. It then
spreads them over the PEs (first half to `in2`, second half to `in1`). A bank
is only overwritten when its stage runs again, which happens after both of
its children are finished.

## Top level (`polar_dec_2p`): interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `frozen` | in | N | frozen-bit mask (bit i = u(i+1)); keep it stable while decoding |
| `in_valid` / `in_ready` | in / out | 1 | handshake for `llr_in` |
| `llr_in` | in | N × Q | one codeword's channel LLRs |
| `out_valid` | out | 1 | a bit pair of each slot is on `out_u_a` / `out_u_b` |
| `out_b_valid` | out | 1 | slot B holds a codeword |
| `out_idx` | out | L-1 | pair index i: bits u(2i+1) (`[0]`) and u(2i+2) (`[1]`) |
| `out_u_a`, `out_u_b` | out | 2 | the decided bits |
| `out_last` | out | 1 | last pair of the two codewords |

The decoder takes a codeword in a cycle where `in_valid && in_ready`:

* Slot A is taken in the idle state.
* Slot B is taken in the following cycle. If nothing is offered then, slot B
  runs empty and `out_b_valid` stays low.

Counting the cycle that takes slot A as cycle 1:

* bit pair 0 appears in cycle L+1;
* the last pair appears in cycle N;
* `in_ready` is high again in cycle N+1, so pairs can follow back to back at
  one pair per N cycles.

The outputs come straight from the last-stage PEs and are not registered.

Parameters:

| parameter | default | meaning |
|---|---|---|
| `N` | 8 | code length, a power of two ≥ 4. 8 is the worked example of the source architecture. Practical codes use 2^10 and more. |
| `Q` | 8 | LLR word length. The source leaves it symbolic. |

Resources for a length N:

* N/2 merged PEs;
* 2 IGCs (N/2-2 storage bits each);
* 6·Q·(N-2) bits of LLR registers;
* a small controller.

## How this RTL relates to the source architecture

These parts follow it:

* the look-ahead schedule and its recursive time chart;
* the adder-subtractor cell equations, with a half cell at bit 0 and full
  cells above;
* the merged PE's block structure: sign/magnitude converters, a shared
  adder-subtractor whose borrow is the comparator, a crossing switch and
  three converters back to two's complement;
* the IGC's recursive units and their resource counts;
* two codewords sharing N/2 PEs, with the per-cycle PE counts of its table
  for N = 8;
* latency N and two codewords per N cycles.

These are this design's own choices:

* Q = 8 and wrap-around arithmetic. No saturation is described.
* How the crossing switch and the signs are steered inside the merged PE.
* The PE-to-slot mapping and the register banks for general N. The source
  draws the switches and registers only for N = 8, and it counts
  Q·(9N/2+4) other registers, where this design uses 6·Q·(N-2).
* The IGC's input register and its toggle form of the c_k controls. The
  source describes c_k as c_1 down-sampled.
* The valid/ready handshake, an empty second slot, and the back-to-back
  restart.
* Frozen bits fixed to 0, and natural index order on the channel side.

The RTL has no standalone min-sum ("Type II") PE. That function is part of
`merged_pe`, whose comparator is the borrow of the shared subtractor.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Every
testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

* `tb_half_addsub`, `tb_full_addsub`: exhaustive tests against integer
  arithmetic.
* `tb_type1_pe`: exhaustive at Q = 6 and random at Q = 8.
* `tb_merged_pe`: all 6-bit input pairs, plus random 8-bit pairs, against
  `min-sum`, `in1+in2` and `in1-in2`.
* `tb_leaf_decide`: random LLRs with every frozen combination.
* `tb_igc`: N = 8 and N = 32. Checks which unit delivers after each pair and
  that its outputs equal the polar transform of the finished block. Also
  covers idle gaps and a restart mid-codeword.
* `tb_llr_store`: N = 8 and 32, against a model of the banks.
* `tb_la_scheduler`: checks the stage order against the recursive
  time-chart construction for N = 8 and 16, and the per-cycle PE counts for
  N = 8. Also covers handshake, back-to-back pairs and an empty second slot.
* `tb_polar_dec_2p`: end to end at the default size, 40 pairs. The
  stimulus and scoreboard in `tb/polar_dec_check.sv` run a software SC
  decoder written independently of the RTL, with the same Q-bit arithmetic.
  Each decoded pair is compared with it, and noiseless codewords are also
  compared with the transmitted bits. The test checks the cycle of the first
  and last pair and of `in_ready`. It also counts the decoder's mechanisms
  and fails if one never occurs: stage 1 of each slot, selection of a u = 1
  candidate, an IGC combine, a frozen bit overriding a negative LLR, an
  empty second slot, a back-to-back pair.
* `tb_polar_dec_sizes`: the same check for N = 4 (Q = 8), N = 64 (Q = 10)
  and N = 1024 (Q = 12), with the three decoders side by side. N = 1024 is the
  largest size simulated.

Run a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
    rtl/polar_pkg.sv tb/tb_polar_dec_2p.sv --top-module tb_polar_dec_2p
./obj_dir/Vtb_polar_dec_2p
```

Building `tb_polar_dec_sizes` takes about a minute, because of the N = 1024
instance.

The concurrent assertions in `la_scheduler` and `polar_dec_2p` check two
things: the run stage stays in range, and a right child is only fed when the
IGC unit it needs has just delivered.

## Files

| file | content |
|---|---|
| `rtl/polar_pkg.sv` | scheduler state type, `trailing_ones` |
| `rtl/half_addsub.sv`, `rtl/full_addsub.sv` | 1-bit adder-subtractor cells |
| `rtl/type1_pe.sv` | Q-bit adder-subtractor |
| `rtl/merged_pe.sv` | merged min-sum / look-ahead PE |
| `rtl/leaf_decide.sv` | last-stage decisions with frozen bits |
| `rtl/igc.sv` | input generating circuit (partial sums) |
| `rtl/llr_store.sv` | per-slot LLR banks and candidate muxes |
| `rtl/la_scheduler.sv` | look-ahead controller for two slots |
| `rtl/polar_dec_2p.sv` | top level |
| `tb/polar_dec_check.sv` | stimulus, reference SC decoder, scoreboard |
