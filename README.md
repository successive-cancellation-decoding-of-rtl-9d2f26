# Stochastic successive-cancellation polar decoder

Successive-cancellation (SC) decoding of a polar code builds a tree of two
operations on likelihood ratios: the "f" combination of two
noisy observations, and the "g" combination, which also uses a bit decided
earlier. A conventional decoder does this with multi-bit fixed-point
arithmetic. This design does it with **stochastic computing**. Every
probability is carried as a serial bit-stream whose density of ones is the
probability. The arithmetic then becomes tiny:

* an f node is **one XOR gate**;
* a g node is **a 2:1 multiplexer, two AND gates and a JK flip-flop**;
* a decision is **a counter of ones**.

The price is time. Every decided bit needs a full stream (1024 clocks here),
and the decoder decides its N bits one after another.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. It follows the
circuits and numbers of Yuan and Parhi, "Successive Cancellation Decoding of
Polar Codes using Stochastic Computing". That paper is a study of the
algorithm. It gives the node circuits, the input-stream generator, the
stream length, the channel scaling factor, and the finding that
re-randomization is needed. It does not give a complete chip. Every part
this implementation had to add is named below.

## 1. The arithmetic

Let `Pa = Pr(a = 1)` be the density of stream `a`. If the input streams are
independent:

| node | function on probabilities | circuit |
|------|---------------------------|---------|
| f    | `Pc = Pa(1-Pb) + Pb(1-Pa)` | `c = a ^ b` |
| g, u_sum = 0 | `Pc = PaPb / (PaPb + (1-Pa)(1-Pb))` | `a' = a`; J = `a' & b`, K = `~a' & ~b` drive a JK flip-flop |
| g, u_sum = 1 | `Pc = (1-Pa)Pb / ((1-Pa)Pb + Pa(1-Pb))` | same, with `a' = ~a` |

The f row is the SC "check" rule written on probabilities. The g row is the
"equality" rule, normalised. Its JK flip-flop does the normalisation. A 1 is
stored when both inputs say 1, and a 0 when both say 0. When they disagree,
the flip-flop holds. Its stationary density is therefore `P(J)/(P(J)+P(K))`.
These are the same circuits as the check and equality nodes of stochastic
LDPC decoders.

All streams carry `Pr(bit = 1)`, not a likelihood ratio. Inverting a stream
turns it into `Pr(bit = 0)`.

## 2. The decoding network (`sc_network`, `psum_net`)

The code is the natural-order polar code `x = u G_N`, where
`G_N = [1 0; 1 1]` raised to the Kronecker power `M = log2 N`. There is no
bit-reversal permutation. The network is the SC graph fully unrolled. It has
M stages. Each stage holds N/2 f nodes and N/2 g nodes.

* Stage 0 reads the N channel streams.
* Stage `s` is split into blocks of size `B = N >> s`. In a block starting at
  row `base`, with `j < B/2`:
  * row `base + j` holds `f(in[base+j], in[base+j+B/2])`;
  * row `base + B/2 + j` holds `g(in[base+j], in[base+j+B/2], u_sum)`. The
    **upper** input is the one that the multiplexer inverts.
* Row `i` of the last stage carries the stream for `u_i`.

For N = 4 this gives f(y1,y3), f(y2,y4), g(y1,y3, u1^u2) and g(y2,y4, u2) in
stage 0, then f, g(.., u1), f, g(.., u3) in stage 1. This is the paper's
worked example, written with 1-based names.

**Partial sums.** Take the g node at row `base+B/2+j`. Its `u_sum` is bit `j`
of the upper half of the block's decided bits, `u_hat[base .. base+B/2-1]`,
re-encoded with `G_{B/2}`. `psum_net` builds one polar-encoder butterfly over
`u_hat`. Layer `k` of that butterfly holds every size-`2^k` block already
encoded, so each g node taps its partial sum from one layer. In the code,
stage `s` has half-block size `H = N >> (s+1)`. Its g node number `gi` reads
layer `log2 H` at row `(gi/H)*2H + gi%H`.

A g node may depend on bits that are not decided yet. Its output is then
meaningless, but it is never on the path of the bit being decided.

**Re-randomizers.** When `RERAND = 1` (the default), every stream between
two consecutive stages passes through a `rerandomizer`. The last stage's
outputs do not. The reason is that the f and g node of a pair read the same
two streams, and the next stage combines their outputs again. Without
re-randomization those streams are correlated, and the formulas above no
longer hold.

The paper says re-randomization is necessary but does not give a circuit.
This design uses a 4-slot shuffle buffer:

1. Each clock, a random 2-bit address picks one slot.
2. The bit in that slot goes out.
3. The incoming bit takes its place.

Every bit leaves exactly once, so the density is kept exactly and only the
order changes. The buffer adds a random delay of a few clocks. The addresses
come from a bank of xorshift32 generators, one per 16 re-randomizers.

## 3. From channel samples to streams (`bitstream_gen`, `xorshift32`)

Each of the N inputs has its own generator. A lookup table turns the sample
into a Q-bit probability. Each clock, a comparator checks that probability
against the top Q bits of a private xorshift32 generator and emits
`random < P`.

**Channel scaling.** The paper scales the log-likelihood ratio by
`alpha * N0`, with `alpha = 0.5`, before it is turned into a probability.
This gains a lot of coding performance.

The samples here are BPSK over AWGN: bit 0 is sent as +1, and the symbol
energy is 1. The log-likelihood ratio is then `ln(P1/P0) = -4y/N0`. The
scaled value is `-4*alpha*y`, so **N0 cancels**. The table can therefore be
indexed by the raw quantised sample and still be independent of the SNR:

    table[y] = min(round(2^Q / (1 + exp(4*ALPHA*y))), 2^Q - 1)

The table is computed in SystemVerilog when the design is elaborated. There
is no data file.

Samples are W = 6-bit two's complement with FRAC = 2 fractional bits, so
they range from -8.0 to +7.75. A sample of 0 gives `Pr = 0.5`, which carries
no information. Q = 10 matches the 2^-10 precision of a 1024-bit stream.

## 4. Deciding the bits (`h_node`, `sc_controller`)

SC decodes `u_0 .. u_{N-1}` in order. Every bit gets one window of `L`
clocks.

* **During window `i`:** the whole network runs. A selector steers output
  stream `i` into the single h node, which counts its ones.
* **First clock of window `i+1`:** the controller stores
  `u_hat[i] = (count > L/2)`, or 0 if `i` is frozen. The new `u_hat` changes
  the partial sums, so the g nodes switch to the next bit's path. In the same
  clock the h node starts counting again with that clock's bit, so no clock
  is lost.
* **After the last window:** one more clock stores `u_{N-1}` and pulses
  `done`.

**Latency:** `N*L + 1` clocks per codeword, which is 1,048,577 at the
defaults. The design holds one codeword at a time.

Frozen bits also take a full window. The paper does not mention skipping
them, and no skipping is done here.

Two effects are not compensated. The g flip-flops and re-randomizers need a
few clocks to respond to new partial sums, and the first bit of each window
is counted with the previous partial sums. At L = 1024 both are small
compared with the stream noise.

## 5. Interface of `stoch_sc_decoder`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | one-clock pulse while `busy` is low; latches `y` and `frozen` |
| `y` | in | N x W | received samples, two's complement, FRAC fractional bits; positive means bit 0 |
| `frozen` | in | N | 1 = frozen position, decided as 0 |
| `busy` | out | 1 | decode in progress |
| `done` | out | 1 | one-clock pulse, N*L+1 clocks after the clock that sampled `start` |
| `u_hat` | out | N | decoded u vector, held until the next `start`; information bits are the unfrozen positions |

The frozen set is an input. Any construction can be used; the testbenches use
the Bhattacharyya bound. A `start` while `busy` is ignored.

**Shorter codes.** A length-`n` code can be decoded by a length-`N` instance:

1. Put the code's samples and frozen mask in the last `n` positions.
2. Set `y = 0` (probability 0.5) in positions `0 .. N-n-1`.
3. Freeze u indices `0 .. N-n-1`.

With the upper half uninformative and frozen to zero, every g node of the
padded part passes its lower input through. The last `n` rows then see
exactly the length-`n` code. The stochastic g node realises this pass-through
only on average. The latency is still `N*L + 1`.

## 6. Parameters

| parameter | default | meaning | from |
|-----------|---------|---------|------|
| `N` | 1024 | code length (power of two) | largest code the paper simulates |
| `L` | 1024 | stream length = clocks per decided bit | paper's final choice |
| `ALPHA` | 0.5 | channel message scaling | paper |
| `RERAND` | 1 | re-randomizers between stages | paper's final configuration |
| `Q` | 10 | probability / random-number width | own choice (2^-10 precision for 1024-bit streams) |
| `W`, `FRAC` | 6, 2 | sample width and fractional bits | own choice |
| `D` | 4 | re-randomizer buffer slots (power of two) | own choice |

**Storage at the defaults**, counted from the RTL structure:

| part | flip-flops |
|------|-----------:|
| sample register, N x W | 6,144 |
| input generators, N x 32 | 32,768 |
| g-node flip-flops, N/2 x M | 5,120 |
| re-randomizer slots, N x (M-1) x D | 36,864 |
| re-randomizer generators, 576 x 32 | 18,432 |
| controller and h node | about 2,100 |
| **total** | **about 101,000** |

The f nodes are N/2 x M = 5,120 XOR gates.

## 7. Files

| file | contents |
|------|----------|
| `rtl/scd_pkg.sv` | xorshift step, seed spreading, the table formula |
| `rtl/xorshift32.sv` | 32-bit xorshift generator |
| `rtl/bitstream_gen.sv` | lookup table + comparator + generator |
| `rtl/f_node.sv`, `rtl/g_node.sv` | the stochastic nodes |
| `rtl/rerandomizer.sv` | shuffle-buffer re-randomizer |
| `rtl/psum_net.sv` | partial-sum butterfly |
| `rtl/sc_network.sv` | unrolled SC graph |
| `rtl/h_node.sv` | window counter and majority decision |
| `rtl/sc_controller.sv` | bit-by-bit sequencer and handshake |
| `rtl/stoch_sc_decoder.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_polar_pkg.sv` (encoder, frozen-set construction, AWGN channel, floating-point SC reference) |

## 8. Verification

Every testbench checks the design against values it computes independently.
Each prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `tb_xorshift32`: the sequence, against the shifts written out by hand.
* `tb_f_node`: the truth table, and the output density against the f formula.
* `tb_g_node`: every output bit against a JK model, with random inputs and
  clears. Also the output density against both g formulas.
* `tb_bitstream_gen`: all 64 table entries against the formula, and the
  density of each stream over 4096 clocks.
* `tb_h_node`: windows with 0, 10, 31, 32, 33, 50 and 64 ones out of 64,
  back-to-back windows, saturation, and the enable.
* `tb_rerandomizer`: every output bit against a model, that the number of
  ones is conserved, and that the order really changes.
* `tb_psum_net`: every partial sum against the generator-matrix definition.
  Bit `c` of `v*G` is the XOR of the `v_r` whose index `r` contains the
  binary digits of `c`.
* `tb_sc_network`: constant streams of a random codeword with the true partial
  sums must put `u_i` on every output row. An N = 2 network must give the f
  and g densities.
* `tb_sc_controller`: decoded word, frozen forcing, the `N*L+1` latency,
  window starts, index sequence and handshake.
* `tb_stoch_sc_decoder` (N = 64, L = 1024), end to end:
  * Clean frames must decode exactly.
  * 16 rate-1/2 frames at Eb/N0 = 3 dB are decoded by the design and by a
    floating-point SC decoder on the same scaled samples. In a typical run
    both made 0 errors in 512 information bits. The test fails above 10 %
    bit errors.
  * A length-16 code is decoded through the padding mode.
  * Every latency is checked.
  * It counts g nodes working with `u_sum` 0 and 1, JK holds, re-randomizer
    reorderings, frozen bits whose h decision was overruled, and decided ones
    and zeros. It fails if any of them never happens.
* `tb_stoch_sc_decoder_full`: the top at its default parameters (N = L =
  1024). It decodes one clean frame, which must be exact, and one 3 dB frame,
  and checks both latencies. In a typical run the 3 dB frame had 0 of 512
  information bits wrong. The two frames take about 7 minutes of simulation.
* `tb_workloads`, with its helper `ber_runner`: rate-1/2 codes at 1, 2 and
  3 dB through four configurations side by side:
  * A: n = 64, L = 1024, re-randomized (the final setup);
  * B: n = 256, L = 1024, re-randomized;
  * C: n = 64, L = 128, scaled, without re-randomization;
  * D: n = 64, L = 128, unscaled, without re-randomization. Here ALPHA is set
    to 1/N0 for 2 dB, which turns the table into the unscaled ratio.

  It checks latencies and frozen bits for all four. For A and B it also
  requires a bit error rate no more than 0.1 above the floating-point
  reference. C and D are only reported: a few dozen frames cannot rank
  configurations. In a typical run A and B made no errors at 2 and 3 dB, and
  at 1 dB their error rates were 0.17 and 0.18 (reference 0.17 and 0.13). D
  had 0.031 at 3 dB, where the reference had 0.005.

What is not verified:

* the error-rate curves, which need far more frames than an RTL simulation
  can run;
* gate-level timing and area.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_stoch_sc_decoder \
        rtl/scd_pkg.sv tb/tb_polar_pkg.sv tb/tb_stoch_sc_decoder.sv
    ./obj_dir/Vtb_stoch_sc_decoder

Other modules are found through `-Irtl -Itb`.

## 9. Where this design departs from, or adds to, the paper

* **Schedule.** The paper's SC example activates stages one after another,
  as a deterministic decoder does. Here all stages run at once on streams,
  and the time is spent as one L-clock window per decided bit.
* **Likelihood notation.** The paper writes f and g on likelihood ratios
  `P0/P1`. Its channel conversion, `Pr(y=1) = e^LR / (e^LR + 1)`, uses a
  log-likelihood `ln(P1/P0)`. The log form is used for the channel.
* **Own choices.** The following are not described in the paper and were
  chosen here:
  * the h node (majority count), and one shared h node with a selector
    instead of one per output;
  * the re-randomizer circuit and where it sits;
  * the random generators and their seeds;
  * the comparator direction;
  * Q, W, FRAC and D;
  * the handshake and the clear of the g flip-flops at the start of each
    codeword;
  * the BPSK/AWGN channel model behind the table.
* **Left out.**
  * Edge memories: the paper found no gain from them.
  * The deterministic decoders it compares against.
  * Its suggestion of several shorter parallel streams, which it leaves as
    future work.
