# Serial belief-propagation list decoder for polar codes

Belief propagation (BP) decodes a polar code by passing soft messages back
and forth over its factor graph: a grid of n = log2 N stages of butterflies.
On its own BP decodes noticeably worse than successive-cancellation list
decoding. BP *list* decoding closes much of the gap by decoding the same
received frame on several permuted factor graphs (PFGs), graphs whose stages
are taken in a different order, until one of them gives a word that passes a
CRC check. Decoding the PFGs one after another on a single BP engine costs
little area, but the engine then needs a different wiring for every PFG.

This design avoids re-wiring the engine. A permutation of the stage order is
the same as permuting the *index bits* of the vectors on both sides of the
graph, so the decoder always runs the original graph and shuffles its inputs
instead: the channel LLRs (L_n) and the frozen-bit priors (R_0) are permuted
before a PFG is decoded, and the decoded bits are permuted back before the
CRC. Every such permutation is built out of only n-1 fixed wiring patterns,
which makes the shuffler small and lets the list size grow without area.

The RTL is written for the configuration N = 1024, 7-bit LLRs (Q7.2: sign, 4
integer and 2 fraction bits), up to 50 BP iterations per PFG, up to 128 PFGs
and the 5G NR CRC-11 g(x) = x^11 + x^10 + x^9 + x^5 + 1.

## Messages and processing elements

Each stage j pairs rows i and i' = i + 2^j. Right-going messages R flow from
the frozen-bit side (stage 0) to the channel side, left-going messages L the
other way. With the offset min-sum function
g(a, b, beta) = sgn(a) sgn(b) max(min(|a|, |b|) - beta, 0):

    R(i , j+1) = g(R(i,j), L(i',j+1) + R(i',j), beta_R)
    R(i', j+1) = g(R(i,j), L(i ,j+1),           beta_R) + R(i',j)
    L(i , j)   = g(L(i,j+1), L(i',j+1) + R(i',j), beta_L)
    L(i', j)   = g(L(i,j+1), R(i,j),             beta_L) + L(i',j+1)

with beta_R = 0.25 (one LSB in Q7.2) and beta_L = 0. `pe_r` computes the
first two, `pe_l` the last two. Every sum saturates to +-63; the code -64 is
never produced, so negation never overflows. R_0 is +63 ("infinity") at a
frozen position and 0 elsewhere; L_n is the channel LLR, positive meaning bit 0.

## The BP unit: two rows of processing elements

`bp_unit` has one row of N/2 `pe_r` and one row of N/2 `pe_l`. In cycle c of
an iteration (c = 0 .. n-2) the R row updates stage c, producing R_{c+1}, and
the L row updates stage n-1-c, producing L_{n-1-c}. R_n and L_0 are never
needed inside the iteration, so an iteration takes n-1 = 9 cycles.

The results of a cycle land in the registers Reg R and Reg L, and one cycle
later move into the R and L memory banks (one column per stage). A row reads
its "own" operand from the register (it was produced the cycle before) or,
in cycle 0, from R'_0 or L'_n. The operand from the other direction is read
from the bank, or from the other register if that register still holds the
column needed. When both rows touch the same stage in the same cycle (the
middle of the iteration) each reads the older value. The selection of the
butterfly pairs of the active stage (the routing networks in front of the
rows) is written as a gather/scatter over index bits, one case per stage.

The decision logic (`sa_termination`) forms L_0 from L_1 and R_0 with one
more row of stage-0 L-side elements, takes u_i = 1 when R_0 + L_0 < 0, and
stops a PFG when the decisions of three consecutive iterations are identical.
Otherwise the PFG stops after I_max = 50 iterations.

## Permutations from n-1 sub-routings

A PFG is written as its stage order [pi_0 .. pi_{n-1}], a permutation of
0..n-1 (the original graph is [0 1 .. n-1]). The sub-routing V_{k,k+1}
exchanges index bits k and k+1 of a vector: in every group of 2^(k+2)
elements, the second and third quarters swap. For n = 3 and the order
[2 0 1], V_{1,2} followed by V_{0,1} turns x0..x7 into x0 x4 x1 x5 x2 x6 x3 x7.
`shuffle_net` holds the n-1 patterns and a multiplexer choosing one of them.

`bsu` turns a stage order into the list of sub-routings. For position i =
0..n-1 it takes the stage s currently found at i, appends the adjacent swaps
that move it from s to i (s-1, s-2, .., i when s > i, or s, s+1, .., i-1
when s < i), and renumbers the remaining entries of the order so they refer
to the new positions. This is one position per cycle, n cycles in all. The
unit then applies the list, one sub-routing per cycle, first to L_n and then
to R_0, writing each result back into the register it came from. With T
sub-routings a PFG is ready n + 2T cycles after the request: 10 cycles for
the original graph, 100 for the fully reversed order (T = 45), and at most
40 when the left four stages are fixed and only the last six are permuted
(T <= 15).

`pgu` is the BSU together with the two registers (R_0 and L_n for the next
PFG) that act as its pipeline register. The PFG memory (128 entries of ten
4-bit stage numbers) sits inside the BSU and is written through a port;
entry 0 is never read because PFG 0 is always the original graph.

`recovery` applies the same list in reverse order to the N decoded bits
(each V_{k,k+1} is its own inverse): T cycles on an N-bit wide network.

## CRC detection

`crc_detect` decides in a single cycle. The remainder of the information
bits divided by g(x) is linear in the bits, so every non-frozen position i
gets a fixed 11-bit signature x^(number of information bits after i) mod
g(x); the remainder of a word is the XOR of the signatures of its 1 bits.
The table is filled once per frozen set, one position per cycle (N cycles,
`ready` is low meanwhile). The information bits are taken in natural index
order, the last 11 being the CRC; frozen positions are ignored.

## Schedule: three PFGs in flight

`bpl_controller` overlaps three jobs. While the BP unit decodes PFG l, the
PGU prepares the inputs of PFG l+1 and the recovery unit un-permutes and
checks the result of PFG l-1. A slot ends when all three are ready: the BP
unit has stopped, the PGU has finished (if PFG l+1 is in the list) and the
recovery of PFG l-1 has failed its CRC. At that edge the working input
memories take the PGU registers ("list change"), the BP unit restarts, the
recovery starts on PFG l and the PGU starts on PFG l+2. When a recovered word
passes the CRC the frame ends at once and the work on the later PFGs is
dropped. If every PFG fails, the word of the last one is output with
`dec_crc_ok = 0`.

With I_l the iterations spent on PFG l, T_l its number of sub-routings
(T_0 = 0) and k the PFG whose word is output, the frame latency in cycles
from `frame_start` to `dec_valid` is

    sum over l = 0..k of  1 + max( 9 I_l + 1,  10 + 2 T_{l+1},  T_{l-1} )  +  T_k

where the second term is present only if PFG l+1 is in the list and the
third only for l > 0. The "+1" after 9 I_l is the cycle that forms the final
hard decisions. A frame that converges on the original graph in I
iterations takes 9 I + 2 cycles (29 cycles for I = 3). A PFG that is ready
later than the BP unit needs it is a *PGU stall*; a recovery that is still
running when the BP unit is done is a *recovery stall*; both show on status
outputs.

## Interface of the top, `bpl_decoder`

* Configuration: drive `frozen` (1 = frozen, natural order) and pulse
  `cfg_build`; write the PFG stage orders with `pfg_we`, `pfg_waddr`,
  `pfg_wdata`; set `list_size` (1..128).
* Frame: when `ready` is high, pulse `frame_start` with `llr_in` valid for
  that cycle (it is buffered). `dec_valid` pulses with `dec_u` (the whole u
  vector in natural order, frozen bits included), `dec_crc_ok` and `dec_pfg`.
* Monitors: `pfg_done`, `pfg_early`, `pfg_iters`, `stall_pgu`, `stall_rec`,
  `list_change`.

All state is reset by the active-low asynchronous `rst_n`, except the PFG
memory contents, which must be written before use.

## Files

`rtl/bpl_pkg.sv` holds the word widths, constants and the saturating
arithmetic; every other file in `rtl/` is one module named after the file.
`tb/tb_<module>.sv` is the self-checking testbench of each module;
`tb/tb_util_pkg.sv` holds the reference models they share (offset min-sum,
polar encoder, serial CRC-11, code construction by polarization weight,
an independent decomposition of a stage order into sub-routings, a Gaussian
noise source).

| module | testbench size | what the testbench checks |
|---|---|---|
| pe_r, pe_l | - | 3000 random and corner inputs against the equations |
| shuffle_net | N = 64 and 8 | every V_{k,k+1}; the [2 0 1] example |
| bsu | N = 1024 | step lists, n + 2T latency, routed data, abort |
| pgu | N = 64 | permuted registers, latency, step list |
| recovery | N = 64 | inverse of random PFGs, T-cycle latency |
| crc_detect | N = 1024 | build time, correct/corrupted words, frozen bits ignored |
| sa_termination | N = 64 | decisions and the three-in-a-row rule |
| llr_in_mem | N = 64 | loads and holds |
| bp_unit | N = 64 | L_1 against a cycle model of the schedule, stalls, noiseless decoding |
| bpl_controller | defaults | slot schedule latency with timing models of the units |
| bpl_decoder | N = 128 | AWGN frames end to end, latency formula, every mechanism |
| bpl_decoder (full) | defaults | (1024, 512) frames with 32 PFGs |

The end-to-end test runs two decoders, the second with I_max = 3: with so
few iterations the BP unit can finish before the recovery, so that instance
is the one that produces recovery stalls. It counts SA stops, I_max stops,
list changes, both stalls, success on PFG 0 and on later PFGs, early exit
and all-fail frames, and fails if any never happened. An 11-bit CRC lets
about one wrong word in 2000 through; such words are counted and
tolerated at a low rate.

To simulate, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/bpl_pkg.sv \
        tb/tb_util_pkg.sv tb/tb_bpl_decoder.sv --top-module tb_bpl_decoder
    ./obj_dir/Vtb_bpl_decoder

The full-size test builds in about a minute and a half and runs in seconds.

## Where this design makes its own choices

* The PE equations, offsets, word width, iteration limit, stage schedule of
  the two PE rows, SA rule, CRC polynomial, the sub-routing network, the
  decomposition algorithm, the PGU organisation and the overlapped schedule
  follow the published description. The internals of the BP unit's memory
  addressing, read-after-write order and bypasses are this design's own.
* Saturation, the value +63 for frozen R_0, and sgn(0) = 0 are own choices.
* CRC detection by a signature table is an own realisation of "CRC
  detection"; so is the bit order of the CRC.
* The frame latency has one more cycle per PFG than a formula that counts
  only 9 I_l for the BP unit; that cycle forms the final hard decisions.
* The description of the schedule also contains a sentence assigning the
  BP unit, PGU and recovery to PFGs l+1, l and l-1; this design follows the
  other statements (BP unit on l, PGU on l+1, recovery on l-1).
* Memories are flip-flop arrays, not SRAM macros. The PFG list itself is
  produced offline by a selection algorithm that is not part of the RTL; the
  testbenches use random stage orders. Likewise the frozen set is an input,
  not a built-in construction.
* Not built: the Benes network that is only used as a comparison, and the
  offline PFG selection.
