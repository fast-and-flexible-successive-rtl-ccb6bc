# Fast-SSCL-SPC list decoder for polar codes

A polar code of length N = 2^n is decoded by walking a binary tree from its root (the N channel
LLRs) down to N leaves (the N transmitted bits u_i, some of them frozen to 0). Successive
cancellation (SC) does this one leaf at a time. A *list* decoder (SCL) keeps the L most likely
decoding paths, splitting every path in two at each information bit and keeping the L best of
the 2L candidates by their *path metric* (PM). At the end a CRC picks the right path.

SCL is slow because it visits every leaf. This decoder recognises four kinds of subtrees, or
*special nodes*, and decodes each one in a few steps without descending to its leaves:

| node   | frozen pattern of its 2^s bits      | how it is decoded |
|--------|-------------------------------------|-------------------|
| Rate-0 | all frozen                           | all bits 0; one PM update |
| Rate-1 | none frozen                          | fork on the S_Rate-1 least reliable bits, hard decisions for the rest |
| Rep    | only the last bit is information     | one fork between "all 0" and "all 1" |
| SPC    | only the first bit is frozen         | even-parity code: fork on the S_SPC least reliable bits, hard decisions for the rest, then fix the least reliable bit for parity |

The "Fast" part limits the forks in Rate-1 and SPC nodes. A list of L paths gains nothing from
forking on more than L−1 bits of a Rate-1 node or L bits of an SPC node, so the remaining bits
take their hard decisions. The limits S_Rate-1 and S_SPC can be set lower still, trading error
rate for speed.

The main configuration is N = 1024, P = 64 processing elements per path, L = 2, S_Rate-1 = 1,
S_SPC = 2, 6-bit LLRs, 8-bit path metrics and a 16-bit CRC. That configuration was reported at
1.048 mm², 885 MHz and 1.861 Gb/s in 65 nm. For the rate-1/2 code the RTL takes 492 cycles per
frame, or about 1.84 Gb/s at that clock. The clock rate has not been checked by timing analysis
here.

## Data representation

* **LLRs** are Q_LLR = 6-bit sign-magnitude: a sign bit (1 = negative, meaning "bit is more
  likely 1") and a 5-bit magnitude. Zero always has the + sign. Every result saturates at
  magnitude 31.
* **Path metrics** are Q_PM = 8-bit unsigned and saturate at 255. The min-sum metric adds |α|
  whenever a decision disagrees with the sign of its LLR α.
* **The path word** (N bits per path) holds the u bits for leaves, Rate-0 and Rep nodes. For
  Rate-1 and SPC nodes it holds the node's codeword bits x, which are what the node decodes.
  To get the information bits of a Rate-1 or SPC node, apply the polar transform of size 2^s
  to its x bits (x = u·F^{⊗s}, F = [1 0; 1 1], an involution). The CRC is computed over this
  word as it is, so the encoder must compute the CRC over the same representation. The
  testbench generator does exactly that.

## Node Sequence

The code is described entirely by the Node Sequence, a table the host writes before decoding.
Changing the code, its rate or the fork limits needs no change to the hardware. Each 20-bit
entry (`fsscl_pkg::node_entry_t`) is `{type[3:0], stage[3:0], size[10:0], frozen}`:

| type     | meaning | size | cycles |
|----------|---------|------|--------|
| DESCEND  | placed before every node; carries the node's stage | 2^s | 1 + LLR steps (+1 commit) |
| LEAF     | single bit at stage 0 | 1 | 1 |
| RATE0    | whole node frozen | 2^s | 1 |
| RATE1_1  | forks of a Rate-1 node | min(S_Rate-1, 2^s) | size |
| RATE1_2  | hard decisions for the rest | remaining bits | 1 |
| REP1     | the 2^s−1 frozen bits | 2^s−1 | 1 |
| REP2     | the information bit, with its fork | 1 | 1 |
| SPC1     | parity γ, least reliable bit i_min, PM start | 1 | 1 |
| SPC2_1   | forks of an SPC node | min(S_SPC, 2^s−1) | size |
| SPC2_2   | hard decisions for the rest | remaining bits | 1 |
| SPC3     | parity fix of bit i_min | 2^s | 1 |

A phase with zero bits is left out. Special nodes are at most P bits (s ≤ log2 P = 6). Larger
special subtrees are split into P-bit nodes by the generator of the sequence. A frozen leaf has
`frozen` = 1. `ns_len` gives the number of entries.

## Datapath

* **Processing elements** (`pe`, `sc_decoders`). L × P PEs, each computing both
  f(a,b) = sgn(a)sgn(b)min(|a|,|b|) and g(a,b,β) = b + (1−2β)a, selected by bit i_s of the leaf
  index.
* **LLR memories** (`channel_memory`, `llr_memory`). All memories are registers, so a stage is
  read, computed and written back in one cycle.
  * The channel memory holds N LLRs as N/P words of P. It is shared by the paths and read only
    for the step from stage n.
  * Each path has a high-stage memory of N/P−2 words of P LLRs, for stages with 2^t > P. Stage t
    occupies words 2^t/P−2 upward.
  * Each path also has a low-stage memory of 2P−2 LLRs. Stage t occupies entries 2^t−2 upward.
  * The step from stage t to t−1 takes 2^(t−1)/P cycles when that is more than one, else one.
* **β memory** (`beta_memory`). The partial sums of each path, N−1 bits, with stage s at offset
  2^s−1. After a node of stage s is decided, its 2^s codeword bits x are folded into every stage
  s' ≥ s in one cycle. Take o as the node's block offset inside the stage-s' block being built.
  o = 0 starts a fresh left block. For each block h that is a bit-subset of o, β[h] ^= x. This
  is the closed form of the XOR recursion β_parent = (β_left ⊕ β_right, β_right).
* **Path memory** (`path_memory`). N single-bit registers per path, written by node type and
  range as listed under *Data representation*.
* **Metric computation** (`pm_compute`).
  * An adder tree gives the Rate-0/Rep sums of |α| over negative (or positive) LLRs.
  * A comparator tree (`min_search`) finds the least reliable bit of the node. A second one
    finds the least reliable *undecided* bit, used for the forks of Rate-1 and SPC nodes.
* **Sorter** (`sorter`). It compares all 2L candidate metrics pairwise, in parallel, and ranks
  them. Ranking order: live candidates first, then lower metric, then lower index. The L best
  survive; the rank gives each survivor's parent and bit.
* **PM memory** (`pm_memory`). The L metrics, plus per-path state across node phases: live
  flag, i_min, γ, |α_min| and the mask of bits already forked.
* **CRC unit** (`crc_unit`). One remainder per path, CRC-16 with polynomial 0x1021 and zero
  start value. Each commit folds in 1 to P bits, as a gated chain of P bit steps. Survivors take
  their parent's remainder.
* **Output**. The path with the lowest metric among those with a zero CRC remainder. If none
  has one, the lowest-metric path with `crc_ok` = 0.

## Schedule

The controller (`controller`) walks the Node Sequence and tracks the leaf index i of the next
node. Each node costs the following:

1. a COMMIT cycle for the previous node (β memory and CRC update, i += its size);
2. one control cycle for the DESCEND entry;
3. LLR steps from stage t0 down to max(s,1). Here t0 − 1 is the highest bit in which i and i−1
   differ (t0 = n for the first node): only the stages above that split point hold stale
   LLRs;
4. one cycle per phase, and one per fork in RATE1_1/SPC2_1.

A leaf computes its stage-1 to stage-0 LLR in its own cycle. A fork computes the metrics,
sorts, and copies the surviving paths' memories, all in one cycle. After the last node come
one COMMIT and one SELECT cycle, and `done` pulses in the next cycle. For a code, the count is
fixed and known in advance; `expected_cycles()` in `tb/polar_frame_gen.svh` computes it.

## Interface (`fsscl_decoder`)

1. Write the N/P channel words (`ch_we`, `ch_waddr`, `ch_wdata[P]`).
2. Write the Node Sequence (`ns_we`, `ns_waddr`, `ns_wdata`) and set `ns_len`.
3. Pulse `start`. `busy` is high until `done` pulses, and the result is valid from then on:
   `dec_word[N]`, `crc_ok` and `dec_pm`.

The channel memory and the Node Sequence may be rewritten while the decoder is idle. The reset
is asynchronous and active low.

## Where this design departs from the published architecture

* **Fork position.** Forks take the least reliable undecided bit of a Rate-1/SPC node, found by
  a masked comparator tree, rather than consecutive bit addresses. This is the ordering the
  fork-limiting argument is based on.
* **Fork timing.** Splitting, sorting and pruning take one cycle, not two. No pipeline registers
  were inserted (their places were not published). A synthesized version may need them, which
  would add cycles.
* **β update.** β is updated once per node in a COMMIT cycle from the path memory, rather than by
  precomputing both outcomes of each bit. This costs one cycle per node.
* **Rep sums.** The repetition-node metric sums are formed in REP2, not REP1. REP1 only clears
  bits.
* **DESCEND.** A DESCEND entry precedes *every* node, leaves included, not only the nodes that
  follow a special node.
* **SPC1.** The SPC1 phase writes the hard decisions into the path memory (Rate-1/SPC nodes keep
  codeword bits there), not zeros.
* **Details the architecture leaves open.** The CRC polynomial, the CRC coverage, the output
  selection rule, the loading interface and the memory address maps are this design's choices.

## Simulating

All testbenches are self-checking and print `TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

    verilator --binary --timing -Irtl -Itb rtl/fsscl_pkg.sv rtl/*.sv tb/tb_fsscl_decoder.sv \
        --top-module tb_fsscl_decoder -Mdir obj -o sim && obj/sim

* `tb_fsscl_decoder` decodes 60 frames at N = 128, P = 8, L = 2. It uses two codes, one with
  single leaves forced into the tree. Its frames come in four kinds:
  * clean frames, decoded exactly;
  * frames with weak wrong-sign LLRs, corrected;
  * noisy frames, where any CRC pass must be genuine;
  * pure full-magnitude noise, which drives the metrics into saturation (same check as noisy
    frames).

  It checks the cycle count of every frame against the schedule. It counts each mechanism and
  fails if one never happened: every node phase, frozen and information leaves, forks, pruning
  that copies a path from another, multi-word LLR steps, channel reads, the fallback when no
  path passes the CRC, and metric saturation. It also reports, without requiring it, how often
  the CRC chose a path over one with a smaller metric.
* `tb_fsscl_full` runs the decoder with its default parameters (N = 1024, P = 64, L = 2) on a
  rate-1/2 code: six frames (clean, pure noise and noisy), with the same checks. A frame takes
  492 cycles.
* `tb_<block>` test each block against a model written independently in the testbench.

Frames are made by `tb/polar_frame_gen.svh`. The frozen set comes from the Bhattacharyya bound
(z = 0.5; a 0 bit of the index maps z to 2z − z², a 1 bit to z², most significant bit first;
the K smallest z carry information). The generator classifies the subtrees into node types,
emits the Node Sequence, draws random information with the CRC in the last 16 bits, encodes
with x = u·F^{⊗n} in natural order, and maps to LLRs.
