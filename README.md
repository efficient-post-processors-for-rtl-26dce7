# Error-floor post-processing in a layered LDPC decoder (IEEE 802.11n, 1944 bits)

Iterative min-sum decoders of LDPC codes stop improving below a certain error
rate: the error floor. Most floor errors are *elementary trapping sets* (ETS):
small groups of wrong bits that sit on checks which each see two of them. Such a
check is satisfied by mistake and keeps telling both bits that they are right.
Only a few checks, each touching one wrong bit, are unsatisfied. The decoder
settles in this local minimum and never leaves it.

The post-processor borrows from simulated annealing. When plain decoding has
failed after M iterations, the decoder is first *heated*: the messages that hold
the trapping set in place are weakened for a while. Then plain decoding resumes
and *cools* it towards a codeword. The trapping set itself is unknown. Its
surroundings can still be found, because the unsatisfied checks are known. Every
variable node (VN) next to an unsatisfied check belongs to the *neighborhood
set*. Heating is applied only there. The post-processor has three tools:

* **Extended heating.** For P iterations, every VC message from a
  neighborhood VN to a *satisfied* check is cut to a small magnitude A0, with
  its sign kept. The falsely satisfied checks then stop backing up the wrong
  bits. The neighborhood set is rebuilt after every iteration. This lets heating
  reach *inner* bits of the trapping set, which touch no unsatisfied check.
  With P = 1 the method is called *quenching*.
* **Focused heating** (soft bit flipping). A VN next to two or more unsatisfied
  checks is probably wrong; it is a *plural bit*. For L iterations, such VNs
  have their posterior LLR cut to a small magnitude B0, so the rest of the graph
  can overturn them. Once they change, their checks become satisfied and the
  neighborhood set shrinks.
* **Cooling.** Plain min-sum iterations.

This RTL builds the post-processor into a row-parallel, layered offset min-sum
decoder for the rate-5/6 (1944,1620) LDPC code of IEEE 802.11n. It is the
configuration for which the method was evaluated on an FPGA, with these default
settings: M = 20, then L = 5 constraining iterations (B0 = 1), a gap of G = 10
plain iterations, P = 10 heating iterations (A0 = 1) and N = 20 cooling
iterations.

## The code and the number format

The parity-check matrix is a 4 x 24 array of 81 x 81 blocks. Each block is
either zero or a cyclically shifted identity matrix. The base matrix is held in
`ldpc_pkg::HB`, where -1 marks a zero block. For an entry x, row r of the block
connects to column (r + x) mod 81 of its block column. Block column c holds
variable nodes c*81 ... c*81+80, and block row l is *layer* l.

Messages are integers in Q5.0 format, clipped to +-15; symmetric clipping keeps
negation exact. Posterior LLRs are 8 bits wide (+-127). Channel LLRs are Q5.0,
with positive meaning bit 0. The check nodes use offset min-sum with an offset
of one LSB.

## Architecture

```
            +------------------------- PE c (c = 0..23) --------------------------+
 llr_in --> | addr_lut --> c2v_mem --r_old,sat_rd--> vn_unit --q--> [A0 mux] --+  |
            |   (layer->valid,shift,addr) |                 ^            ^     |  |
            |              ^              +--> pp_controller+--rw_en-----+     |  |
            |              |                   ^    |  \--flip_en--> vn_unit   |  |
            |              |         label_mem-+    +--inc--> label_mem        |  |
            +--------------|-----------------------------------------------|--+
                           |  c2v_in (VN order)                v2c_pp (VN order)
                 inverse barrel_shifter                     barrel_shifter
                           ^                                       |
                           +------ 81 x check_node (24 inputs) <---+
  syndrome_check <-- hard decisions of all PEs;  decoder_ctrl sequences it all
```

* **Processing element (`pe`)**, one per block column (24 in total). It holds
  81 VN lanes (`vn_unit`) with their posteriors, and the check-to-variable
  messages of every non-zero block of its column (`c2v_mem`). Each c2v message
  is stored with its check's `sat` flag. The PE also holds the neighborhood
  labels (`label_mem`) and the labeling and reweighting logic
  (`pp_controller`). A small table (`addr_lut`) gives, for each layer, whether
  the column takes part, the block's shift, and the memory word.
* **Barrel shifters.** A forward rotation brings a PE's VC messages from VN
  order into the row order of the current block. An inverse rotation brings the
  c2v answers back.
* **Check nodes (`check_node`)**, 81 of them, one per row of a layer. Each
  takes one message from each of the 24 PEs and ignores the PEs whose block in
  this layer is zero. It returns the minimum of the other inputs' magnitudes,
  less the offset, with the product of the other inputs' signs. It also returns
  `sat`, the sign product over *all* inputs. `sat` says whether the check is
  satisfied, and the post-processor reads it.
* **`syndrome_check`** computes all 324 parity checks from the hard decisions.
* **`decoder_ctrl`** runs the layers, the iterations and the post-processing
  phases.

### One layer per clock cycle

A layer is done in a single clock cycle, across all 81 rows and all 24 PEs:

1. Each participating PE reads the word of this layer from its c2v memory,
   giving r_old and sat_rd per lane. It forms q = Lps - r_old and clips q to
   +-15.
2. The A0 mux replaces q with A0*sgn(q), where sgn(0) counts as +1, on lanes
   where `rw_en` is set.
3. The messages are rotated, pass through the check nodes and are rotated back.
4. On the clock edge the PE stores the new c2v message and its sat flag. It
   sets Lps = (Lps - r_old) + r_new, using the unclipped, unreweighted q, and
   counts unsatisfied checks into the label memory.

An iteration is 4 layer cycles plus one *check cycle*. In the check cycle the
syndrome of the finished iteration is examined, the labels are committed, and
plural bits may be soft-flipped.

## How the post-processor works here

This is the least obvious part of the design.

**Labels are counts, double-buffered.** Each VN has a 2-bit saturating count of
the unsatisfied checks it saw in an iteration. A count of 1 or more puts it in
the neighborhood set; 2 or more makes it a plural-bit candidate. During an
iteration the count builds up in `acc`, one increment per layer, using the
check nodes' fresh `sat` flags. In the check cycle `acc` moves to `cur`. The
labels used in iteration t therefore come from the checks of iteration t-1, and
the set is rebuilt after every iteration.

**Reweighting** happens when the iteration is a heating iteration, the lane's
`cur` label is on, and the `sat` flag read with r_old is 1. That flag is the
state of the same check in the previous iteration. So the label and the
satisfied/unsatisfied decision come from the same iteration.

**Soft bit flipping.** In the check cycle before each constraining iteration,
every lane whose `acc` count is 2 or more keeps the sign of its posterior, and
the magnitude drops to B0. A layered decoder needs one more step here. The
posterior already contains every stored c2v message. If those messages stayed,
the next VC message Lps - r_old would undo the flip, and a strong opposite value
could even come out. So the flipped lane's c2v messages are cleared in every
word of its memory (`c2v_mem.zero_lanes`). The VN then restarts from B0 as if
that were its channel value. The sat flags are kept.

**The schedule** is a run-time input (`ldpc_pkg::pp_cfg_t`). Iteration i, counted
from 0, is in phase:

| iterations                | phase        | what happens                           |
|---------------------------|--------------|----------------------------------------|
| 0 .. M-1                  | `PH_BP`      | plain layered min-sum                  |
| M .. M+L-1                | `PH_CONSTRAIN` | plural bits soft-flipped before each |
| M+L .. M+L+G-1            | `PH_GAP`     | plain                                  |
| M+L+G .. M+L+G+P-1        | `PH_HEAT`    | VC reweighting to A0                   |
| M+L+G+P .. M+L+G+P+N-1    | `PH_COOL`    | plain                                  |

Decoding stops at the first check cycle whose syndrome is all zero. Otherwise it
stops after M+L+G+P+N iterations, with `ok` = 0. `ldpc_pkg::CFG_80211N` is
(M, L, G, P, N, A0, B0) = (20, 5, 10, 10, 20, 1, 1). Other settings select other
methods:

* quenching: L = G = 0, P = 1;
* extended heating alone: L = G = 0;
* the array-code setting: B0 = 3.

## Interface and timing (`ldpc_pp_decoder`)

| port | dir | meaning |
|------|-----|---------|
| `llr_we`, `llr_col[4:0]`, `llr_in[81]` | in | load the channel LLRs of block column `llr_col` (lane i = VN llr_col*81+i); ignored while busy |
| `start` | in | begin decoding (while not busy) with schedule `cfg` |
| `cfg` | in | `pp_cfg_t` {m, l, g, p, n, a0, b0}; sampled at start |
| `busy`, `done` | out | busy for 5 cycles per iteration; `done` pulses for one cycle after |
| `ok`, `iters`, `pp_used`, `n_unsat` | out | codeword found; iterations run; post-processing entered; failed checks now |
| `phase` | out | phase of the current iteration |
| `hard[24][81]` | out | hard decision of every VN (1 = negative posterior) |

Loading takes 24 cycles, and a frame of k iterations takes 5k cycles. At the
paper's 100 MHz clock, a frame that converges in 5 iterations takes 0.25 us to
decode. A frame that runs the full 65-iteration schedule takes 3.25 us.
Post-processing only starts on frames that fail after M iterations, which is
rare at operating error rates. It therefore adds almost nothing to the average
throughput.

## What is the paper's and what is this design's own

Taken from the paper:

* the base matrix;
* Q5.0 messages;
* min-sum with a correction term;
* the PE contents: address lookup table, c2v memory, VN, post-processing
  controller, label memory and A0 mux;
* the barrel shifter between the PEs and the check nodes;
* the label rule (at least one unsatisfied check) and the reweight rule
  (label AND sat; the message becomes A0 times the sign of the VC message);
* the phases and their default lengths.

This design's own choices:

* One layer per clock cycle with a combinational datapath. There are no
  pipeline stages and no block RAM; the memories are register arrays.
* An inverse barrel shifter on the c2v return path. The published block
  diagram draws only one shifter, on the VC path, and leaves the return path
  unrotated.
* The offset value of 1. The paper allows an offset or a normalisation factor
  without giving a value.
* The 8-bit posterior width.
* 2-bit label counts instead of one label bit, because plural bits have to be
  detected.
* The double-buffered labels, and the choice of which sat flags feed labeling
  and which feed reweighting.
* The phase order constrain -> gap -> heat -> cool, with the gap as plain
  iterations. The paper gives the lengths, and says that focused heating narrows
  the set "so that extended heating can be applied", but gives no explicit
  order.
* Soft bit flipping keeps the sign, and the flipped lane's c2v messages are
  cleared. The paper's text says both "corrected by bit flipping" and "reduce
  the reliability of the soft decision to a low value B0". A sign-inverting
  version made the plural set grow from one iteration to the next on
  waterfall-region frames.
* A syndrome check on the hard decisions decides convergence.
* The loading interface and the status ports.

The fully-parallel variant of the post-processor is not built. That variant is a
per-VN NAND/AND/mux post-processor for a (648,540) code. Its logic is the same
as `pp_controller` and the A0 mux, applied to all of a VN's edges at once.

## Sizes and limits

The defaults are the paper's: Z = 81, 24 block columns, 4 layers, Q5.0. The
code is fixed by the base-matrix constant, so other codes need a new `HB` and,
if their shape differs, new `MB`/`NB` values:

* the (2209,1978) array code has 5 x 47 blocks of 47 x 47;
* the (2048,1723) RS-LDPC code has 6 x 32 blocks of 64 x 64 permutations;
* the (648,540) 802.11n code uses another base matrix with Z = 27.

Setting Z below 81 takes the shifts mod Z. This still gives a valid QC-LDPC
code, but not an 802.11n code. The schedule fields are 7 bits each (up to 127
iterations per phase), and the iteration counter is 10 bits.

## Simulating

Every testbench in `tb/` checks its own results and ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/ldpc_pkg.sv \
          tb/tb_ldpc_pp_decoder.sv --top-module tb_ldpc_pp_decoder -Mdir obj
./obj/Vtb_ldpc_pp_decoder
```

`tb_ldpc_pp_decoder` runs the full-size decoder at its default parameters. It
sends noisy all-zero frames and compares each frame bit for bit with a
reference decoder written in the testbench. That reference works edge by edge
and computes each check output as a direct minimum over the other inputs. The
testbench also checks the iteration count, `ok`, `pp_used`, `n_unsat` and the
5-cycles-per-iteration timing. It uses the paper's schedule, short schedules
(M = 2 or 3) that force post-processing, quenching, and extended heating alone.
It counts BP convergence, post-processing entry, soft flips, reweighting, gap
and cooling iterations, frames fixed after post-processing began, and failing
frames, and reports a failure for any of these that never happened. It builds
in about a minute and runs in about a second.

The block testbenches (`tb_<module>.sv`) check each module against an
independent model with random stimulus, plus hand-worked cases. Examples are
the lookup-table entries for columns 0, 12 and 23, and a three-input check
node.

How far to trust it:

* The RTL agrees exactly with the reference model, and both decode
  low-noise frames.
* The error-floor results themselves were not reproduced. That would need
  billions of frames, or captured trapping-set errors.
* The reweighting and flipping rules are exercised on waterfall-region frames,
  not on real trapping sets.
