# Fully parallel IPA decoder for Reed-Muller codes RM(m,3)

Recursive projection-aggregation (RPA) decoding corrects errors in a
Reed-Muller codeword by working on many lower-order codes. Each "projection"
adds pairs of coordinates, z and z XOR i, so a received word of length n = 2^m
becomes n-1 words of length n/2 that belong to RM(m-1, r-1). These are decoded
recursively down to first-order codes, which a fast Hadamard transform decodes
exactly. Every coordinate then collects n-1 "votes" on whether it is in error
("aggregation").

RPA iterates at every level of the recursion. The iterative variant (IPA) used
here iterates only at the outermost level. Each inner level runs once, which
turns the recursion into a fixed feed-forward datapath: projection levels,
a bank of first-order decoders and aggregation levels. A small controller
feeds the result back until it stops changing or N_max iterations have run.

This RTL implements that datapath fully in parallel for order r = 3, with m as
a parameter. The default is RM(6,3): n = 64, k = 42, minimum distance 8, and
at most N_max = ceil(m/2) = 3 iterations.

## Dataflow and timing

One codeword is in the decoder at a time. An iteration takes
3(r-1)+4 = **10 clock cycles**:

| clock | stage | unit | width (m = 6) |
|---|---|---|---|
| 0 | current estimate y | `control_unit` | 64 bits |
| 1 | level-1 projections y1[i] = Proj(y, i), i = 1..63 | `projection` | 63 x 32 |
| 2 | level-2 projections Proj(y1[i], q), q = 1..31 | `projection` | 1953 x 16 |
| 3 | Hadamard spectra | `fod` / `fht` | 1953 x 16 x 6 bit |
| 4 | peak index and sign | `fod` / `argmax` | 1953 x (4+1) |
| 5 | re-encoded RM(4,1) codewords | `fod` / `gen_matrix` | 1953 x 16 |
| 6 | vote counts, level 1 | `agg_unit` / `majority_voter` | 63 x 32 counts |
| 7 | aggregated level-1 words | `agg_unit` | 63 x 32 |
| 8 | vote counts, level 0 | `agg_unit` / `majority_voter` | 64 counts |
| 9 | new estimate y-hat | `agg_unit` | 64 |
| 10 | fixed-point / limit check, y <- y-hat | `control_unit` | |

The register after each stage only shortens the critical path. The data
registers therefore have no enable and no reset. The estimate y stays
constant during an iteration, so every stage settles to the right value, and
the controller reads y-hat in the tenth cycle. A codeword takes N_iter x 10
cycles. The decoder accepts the next word in the final cycle of the current
one, so words follow each other with no gap. At 80 MHz with N_iter = 3 that
is 80e6 x 64 / 30 = 171 Mbit/s.

## Projection (`projection_unit`, `projection`)

Projection index i (1 <= i < 2^m) pairs z with z XOR i. Let h be the highest
set bit of i. Coordinate t of the projected word belongs to the pair whose
member with bit h = 0 is z_t = t with a 0 inserted at bit h:

    y_i(t) = y(z_t) XOR y(z_t XOR i)

The re-ordering step (ROU) places the two members of each pair next to each
other, and an XOR row adds them. This closed form gives the same ordering as
the recursive definition, which splits the word in halves until bit h is the
top bit (`tb/ipa_ref_pkg.sv` holds the recursive form, and the tests compare
the two). Level-2 child q of level-1 node p has flat index p*(2^(m-1)-1) + q-1
and uses projection index q.

## First-order decoders (`fht`, `argmax`, `gen_matrix`, `fod`, `first_order_decoder`)

Each of the (2^m-1)(2^(m-1)-1) innermost words is a noisy RM(m-2,1) word. It
is decoded by maximum correlation:

* `fht` computes l = (1-2y) H with the Sylvester Hadamard matrix. Each stage
  forms sums (upper half) and differences (lower half) and recurses, so l[z]
  comes out in natural order. The words are M+2 bits wide and signed.
* `argmax` finds the z with the largest |l[z]|. It uses a tree of magnitude
  comparators, and a tie goes to the lower index. The sign of l[z] is the
  complement bit.
* `gen_matrix` outputs s XOR parity(p AND z) for each position p. This is the
  message [s, z_0 ... z_{m-1}] times the generator matrix
  G(m,1) = [G(m-1,1) G(m-1,1); 0 G(m-1,0)], with bit k of z multiplying the
  row of G that equals bit k of the column index.

## Aggregation (`majority_voter`, `agg_unit`, `aggregation`)

An AGG unit for length 2^M takes the word y_in being refined and, for each
branch i, the branch's projection y_i and its decoding y-hat_i. The RRUM of
the branch forms e_i = y_i XOR y-hat_i, where a 1 means the decoder changed
that pair sum. It then gives coordinate z the bit e_i(FindIndex(z,i)). Here
FindIndex(z,i) is the position of the pair {z, z XOR i} in the projected word.
Coordinate z is flipped when more than half of the 2^M-1 branches vote for it.
Level 1 holds 2^m-1 units of length 2^(m-1), and level 0 holds one unit of
length 2^m. The vote counts are registered, and so are the flipped words.

## Control and interface (`control_unit`, `ipa_decoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (control state and output only) |
| `in_valid`, `in_ready`, `in_y[2^M]` | in/out/in | received hard-decision word, valid/ready handshake; hold `in_y` while waiting |
| `out_valid`, `out_c[2^M]` | out | decoded word, `out_valid` is a one-cycle pulse |
| `out_iters` | out | iterations used (1..N_max) |
| `out_conv` | out | 1: stopped at a fixed point (y-hat = y); 0: stopped at N_max |

Parameters of `ipa_decoder` are `M` (default 6) and `NMAX` (default
ceil(M/2)). The order r = 3 is fixed by the structure. The package `ipa_pkg`
holds r, the cycle budget and the index helpers.

## Where this RTL departs from, or adds to, the reference description

* The handshake, the reset, the output register and the acceptance of the
  next word in the last cycle are this design's own.
* Argmax uses the magnitude |l|, with ties going to the lower index. The
  description says "maximum of l" but then uses the sign of the peak, which
  only makes sense for a magnitude peak.
* The iterative algorithm indexes projections with mod(i, 2^m-1), which gives
  0 for the last child. The index ((i-1) mod (2^m-1)) + 1 is used instead.
  Its final line "c <- y-hat_(0,1)" is read as y-hat_(1,0). Its formula for k
  uses binom(n,i), read as binom(m,i).
* The pipeline registers are placed as follows. Projection has one register
  per level. Each FOD has one register after each of FHT, argmax and
  re-encoding. Aggregation has two per level: after the vote counts and after
  the flip. The termination check has one. Only the number of registers per
  component (r-1, 3, 2(r-1), 1) is given. Registering every FHT output costs
  far more flip-flops than the 65,699 reported for an FPGA build, so that
  build must have placed or shared its registers differently.
* Only r = 3 is built. For r > 3 the datapath would need more projection and
  aggregation levels.

## Verification

Each unit has a self-checking testbench in `tb/` (`tb_<module>.sv`). All of
them compare against `tb/ipa_ref_pkg.sv`, a behavioural model that follows the
recursive projection, recursive FindIndex, vote-and-flip aggregation and
exhaustive-correlation first-order decoding. The RTL uses closed forms, so the
model is an independent check. Highlights:

* `tb_fht` checks all 65,536 16-bit inputs. `tb_gen_matrix` checks all
  messages against a G(m,1) built by the recursion.
* `tb_fod` streams one word per cycle and checks the 3-cycle latency. Words
  with up to 3 errors are corrected.
* `tb_control_unit` uses a stand-in datapath and checks the N_iter x 10 cycle
  latency, the stall while busy, the back-to-back acceptance and both stop
  rules.
* `tb_ipa_decoder` runs the whole decoder end to end against the reference
  IPA decoder: output word, iteration count, stop reason and latency. Two
  decoders get the same word stream: one with N_max = 3, one with N_max = 1.
  The bench counts fixed-point stops, limit stops, multi-iteration decodings,
  back-to-back accepts, stalls and corrected words, and fails if any of them
  never happens.

**Sizes simulated.** `tb_projection`, `tb_agg_unit` and `tb_aggregation` run
at the full RM(6,3) size. `tb_first_order_decoder` and the end-to-end
`tb_ipa_decoder` run RM(5,3): 465 first-order decoders, n = 32. A
full-size RM(6,3) simulation has 1953 FODs, and its C++ build with verilator
took longer than 15 minutes, so no full-size end-to-end run is included.
The RTL is generic in M, and the reference model covers m <= 6.

To run one testbench:

    verilator --binary --timing --assert -Irtl -Itb rtl/ipa_pkg.sv \
        tb/ipa_ref_pkg.sv tb/tb_ipa_decoder.sv --top-module tb_ipa_decoder
    ./obj_dir/Vtb_ipa_decoder

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

## Evaluated configurations

* RM(6,3), N_max = 3: the default parameters. This is the size of the FPGA
  build (80 MHz, 171 Mbit/s minimum throughput).
* RM(7,3): error-rate simulations only. It needs M = 7 (127 x 63 = 8001
  RM(5,1) decoders). The RTL parameter allows it, but it has not been
  simulated.
