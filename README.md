# Fast successive-cancellation polar decoder with sequence-repetition nodes and threshold-based hard decisions

This is synthesizable SystemVerilog for a semi-parallel polar-code decoder built around three ideas.

1. **Sequence-repetition (SR) nodes.** Whole subtrees of the SC decoding tree are decoded in a few clock cycles. An SR node covers most special node types in one rule.
2. **Threshold-assisted (TA) hard decisions.** A general subtree can be skipped when every input LLR is far enough from zero. The decoder then takes the signs of the LLRs as the subtree's codeword.
3. **Multi-stage decoding.** A TA attempt whose CRC fails is repeated without the shortcut. The error rate of the plain decoder is kept, while most frames take the short path.

The default configuration is the one the design was evaluated in:

- code length N = 1024
- P = 64 processing elements
- a 16-bit CRC (D^16 + D^12 + D^5 + 1)
- 8-bit LLRs

## 1. Background: SC decoding as a tree walk

A polar code of length N = 2^n is decoded by walking a binary tree of depth n.

- A node at level j receives 2^j LLRs, alpha_j. It returns 2^j hard decisions, beta_j.
- The left child gets `f(alpha_j[2k], alpha_j[2k+1])`. This design uses the min-sum form `sign(a) sign(b) min(|a|,|b|)`.
- The right child gets `g = (-1)^beta_L[k] alpha_j[2k] + alpha_j[2k+1]`.
- The node returns `beta_j[2k] = beta_L[k] xor beta_R[k]` and `beta_j[2k+1] = beta_R[k]`. Indices here are 0-based.
- Leaves are frozen bits (always 0) or information bits (the sign of the LLR).

Fast SC decoding stops the walk at nodes whose frozen pattern allows a direct, parallel decision:

- **Rate-0:** all bits frozen. The node returns zeros.
- **Rate-1:** no bits frozen. The node returns the signs of its LLRs.
- **Repetition (REP):** only the last bit is information.
- **Single parity check (SPC):** only the first bit is frozen.

### SR nodes

Follow the right branch down from a node. Suppose every left sibling passed on the way is Rate-0 or REP, and the branch ends at a node of some other type, called the *source node*, at level r. Then the node at level j is an SR node.

- Each REP sibling contributes one unknown bit, eta, which is free.
- Each Rate-0 sibling contributes a bit fixed to 0.
- The node's output is the source node's output, repeated 2^(j-r) times with a block-wise XOR of a *repetition sequence* s. The sequence s is set by the eta bits.
- There are |S| = 2^(number of REP siblings) possible sequences.

For each sequence, the source node's LLRs are obtained by folding:

    alpha_src[k] = sum over m < B of alpha_j[k*B + m] * (-1)^s[m],   B = 2^(j-r)

The sequence with the largest path metric, `sum_k |alpha_src[k]|`, is chosen.

- The source node is decoded once, with those LLRs.
- The output is `beta_j[k*B + m] = beta_src[k] xor s[m]`.

This one rule covers REP nodes (an SR node with a length-1 Rate-1 source). It also covers the REP-like families described in the literature. This decoder limits |S| to 16.

Bit m of sequence s is the XOR, over the free eta bits, of each eta_k AND NOT the bit of m that the REP sibling at level k selects. `srfsc_pkg::rep_seq_bit` gives the exact formula. The i-th free eta takes bit i of the path index l.

### EG-PC nodes

An extended generalized parity-check (EG-PC) node at level j has these children:

- a leftmost descendant at level q that is Rate-0 or REP;
- Rate-1 nodes everywhere else.

Its bits form 2^q interleaved single-parity-check codes. In the tree order used here they are 2^q contiguous blocks of 2^(j-q) bits, and every block's parity equals a common value z.

- **Rate-0 leftmost node:** z = 0. This is the plain SPC node when q = 0.
- **REP leftmost node:** z is unknown and is estimated as the sign of the sum of the blocks' check values. A block's check value is its parity sign times its smallest |LLR|. This is the min-sum form of the exact rule, 2 atanh(prod tanh(alpha/2)), which the original work states; this design uses min-sum here as it does for f.
- **Wagner decoding:** each block then takes the signs of its LLRs. If its parity differs from z, it flips its least reliable bit.

## 2. The threshold-assisted shortcut

The shortcut applies to a general node, meaning one that is not Rate-0, Rate-1, EG-PC or SR, with mean LLR m under the Gaussian approximation. The all-zero codeword and a given Eb/N0 are assumed.

- Each input LLR of the node is modelled as Gaussian with mean m and variance 2m.
- Take the threshold T = | -m + c sqrt(2m) |.
- If every input satisfies |alpha| > T, the node's output is taken directly as the signs of its inputs, and the subtree is skipped.
- The test is only made on nodes with m >= m_min, where the probability of a wrong hard decision is bounded by the target.

The target epsilon sets c and m_min:

| epsilon | c   | m_min   |
|---------|-----|---------|
| 0.9     | 3.8 | 9.3891  |
| 0.99    | 4.3 | 14.7255 |
| 0.999   | 4.8 | 16.1604 |

T and the mean of every node are computed off-line and stored in the schedule. At run time only the comparison is made. The comparison runs in the processing elements during the f pass that computes the node's left-child LLRs, so a node that passes costs only that pass.

## 3. Multi-stage decoding

`srfsc_decoder` decodes a frame in up to two attempts.

1. **First attempt: TA-SRFSC.** The decoder runs with the shortcut on. The decoded u is checked against the CRC carried in the information bits.
2. **Second attempt.** It happens only if the CRC fails *and* a hard decision was actually taken. The frame is decoded again from the first bit with the shortcut off, reusing the channel LLRs, which stay in memory. No intermediate LLRs are saved.
3. **Result.** The CRC of the delivered result is reported as `crc_ok`.

With `multi_stage = 0` the decoder makes a single plain SRFSC attempt.

## 4. Hardware organisation

```
              prog_* --> [ schedule memory ] --> sequencer (srfsc_core FSM)
                                                    |
 llr_* --> [ LLR memory: alpha_j at 2^j .. 2^(j+1)-1 ]    [ beta memory: 2 x 2N bits ]
                 |                                              |
                 +--> pe_array (P x f/g + TA comparators) ------+
                 +--> sr_adder_tree x 16 --> path_select        |
                 +--> cs_tree (parity / min / argmin per block) +
                                                                |
 srfsc_decoder:  beta_root --> polar_unpack --> crc_check (P bits per cycle) --> retry / done
```

| module | role |
|---|---|
| `srfsc_pkg` | instruction format (`instr_t`), opcodes, sizes, repetition-sequence function |
| `pe_array` | P lanes of f (min-sum) or g (saturating), plus strict `|x| > T` comparators and hard decisions |
| `sr_adder_tree` | folds one chunk of P LLRs with one repetition sequence. Gives the source LLRs per block of 2^lvl lanes, the chunk's share of the path metric, and the whole-chunk sum for blocks longer than P |
| `path_select` | argmax over up to 16 path metrics; the lower index wins ties |
| `cs_tree` | per block of 2^lvl lanes: parity of the signs, smallest magnitude and its position |
| `srfsc_core` | memories, sequencer and the SR, EG-PC and TA control |
| `polar_unpack` | turns the codeword estimate into u (the polar transform is its own inverse) |
| `crc_check` | bit-serial-equivalent CRC that absorbs P masked bits per cycle |
| `srfsc_decoder` | top level: two-attempt control around the core, the unpacker and the CRC |

### Memories

- **LLR memory.** A single array of 2N words. Level j occupies addresses 2^j to 2^(j+1)-1, and the channel LLRs (level n) fill the upper half. f and g write the level below the one they read.
- **Hard-decision memory.** Two bit arrays of 2N bits with the same layout: slot 0 holds a left child's result until its parent combines, and slot 1 holds a right child's.
- **EG-PC scratch.** Per-block parity and least-reliable position, N/2 entries.
- **Schedule memory.** 2048 entries of 50 bits.

At the defaults this is 16 kbit of LLRs, 4 kbit of hard decisions and about 100 kbit of schedule. All are plain arrays; a memory compiler would map them to RAMs.

### The schedule

The core does not derive the tree structure itself. The node types, SR parameters and thresholds of a code are fixed, so an off-line compiler turns the frozen-bit pattern into a flat program. The core executes it with a program counter:

| op | meaning | cycles |
|---|---|---|
| `OP_F`    | f on level j into level j-1. With `ta_en` it also tests the node against `thr`, writes the signs as the node's result, and jumps to `skip` if all inputs pass | ceil(2^(j-1)/P) |
| `OP_G`    | g on level j using the left child's result | ceil(2^(j-1)/P) |
| `OP_C`    | combine the two children's results | ceil(2^(j-1)/P) |
| `OP_R0`, `OP_R1` | Rate-0 / Rate-1 leaf | ceil(2^j/P) |
| `OP_EGPC` | signs, parities and minima (pass 0); z; Wagner flips, P blocks per cycle (pass 1) | ceil(2^j/P) + ceil(2^q/P) |
| `OP_SRS`  | SR node: path metrics of all sequences in parallel (pass 0, skipped when \|S\| = 1), then the chosen source LLRs written to level r (pass 1) | (\|S\|>1 ? 2 : 1) x ceil(2^j/P) |
| `OP_SRX`  | SR output: source result XOR the chosen sequence | ceil(2^j/P) |
| `OP_END`  | end of attempt | 1 |

Between `OP_SRS` and `OP_SRX` the source node is decoded by ordinary instructions at level r, which may be a whole general subtree.

The path is chosen *before* the source node is decoded. The metric depends only on the folded LLRs, so decoding just the winner gives the same result as decoding all |S| candidates and picking afterwards.

Instruction fields (`instr_t`):

- `op`, `j`, `r`: the opcode, the level, and the source level or leftmost-node level
- `rep_left`: the EG-PC leftmost node is REP
- `side`: which result slot the instruction writes
- `ta_en`, `thr`: the TA test and its threshold (8 bits, in LLR units)
- `eta_free`: one bit per level, marking REP siblings
- `skip`: the TA jump target

A behavioural version of the compiler, with a Gaussian-approximation code construction, is in `tb/srfsc_sched_pkg.sv`. It shows how a schedule is produced.

### Fixed point and timing

- LLRs are 8-bit two's complement, saturated at +/-127.
- SR folding and path metrics are kept at full width and saturated only when written back.
- Every tree (adder, comparison, compare-and-select) is combinational, so an instruction moves one chunk of P values per clock.
- Handshakes: the core's `done` pulses once at the end of an attempt. The top's `done` pulses with `u_hat`, `crc_ok`, `attempts` and `cycles`, which stay valid until the next `start`.
- The CRC check takes N/P cycles per attempt. At the defaults that is 16.

## 5. Using it

1. Write the schedule through `prog_we`/`prog_addr`/`prog_data`. This is done once per code, Eb/N0 and epsilon.
2. Write the channel LLRs, one chunk of P per `llr_we` cycle.
3. Hold `info_mask`: 1 at every message or CRC position, message first.
4. Pulse `start`.

`srfsc_decoder` parameters:

- `LOG_N` (10), `LOG_P` (6) and `QW` (8)
- `CRC_L` (16) and `CRC_POLY` (16'h1021)

The 6-bit CRC (D^6 + D^5 + 1) is `CRC_L = 6, CRC_POLY = 6'h21`. The 11-bit CRC (D^11 + D^10 + D^9 + D^5 + 1) is `11'h621`.

Another code length needs a different `LOG_N`. The memory layout is tied to N.

### Simulation

All testbenches are self-checking and print `TB_RESULT checks=.. failures=..`. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/srfsc_pkg.sv tb/srfsc_sched_pkg.sv \
      rtl/pe_array.sv rtl/sr_adder_tree.sv rtl/path_select.sv rtl/cs_tree.sv \
      rtl/crc_check.sv rtl/polar_unpack.sv rtl/srfsc_core.sv rtl/srfsc_decoder.sv \
      tb/tb_srfsc_decoder.sv --top-module tb_srfsc_decoder -o tb
    ./obj_dir/tb

The packages must come first. A unit testbench needs only the package files, its module and its testbench.

| testbench | what it checks |
|---|---|
| `tb_pe_array`, `tb_sr_adder_tree`, `tb_path_select`, `tb_cs_tree` | random vectors against direct integer formulas |
| `tb_crc_check` | frames with a correct CRC pass; the same frames with one flipped bit fail. Bits are fed with random skip masks |
| `tb_polar_unpack` | inverts an independent recursive encoder |
| `tb_srfsc_core` (N = 64, P = 4) | bit-exact and cycle-exact against a recursive reference decoder. Covers many codes, with TA on and off, and counts TA decisions, SR nodes with \|S\| > 1, REP-leftmost EG-PC nodes and Wagner flips |
| `tb_srfsc_decoder` (N = 128, P = 8, 6-bit CRC) | end to end against the reference: u, `crc_ok`, attempts and cycle bounds. Every mechanism must occur at least once: TA, a second attempt, a failed first CRC, plain mode, SR, Wagner |
| `tb_srfsc_decoder_full` | the same, at the default parameters (N = 1024, P = 64, 16-bit CRC), about a minute |
| `tb_srfsc_workloads` | N = 1024 at R = 1/4, 1/2, 3/4 and epsilon = 0.9, 0.99, 0.999; prints node counts and cycles |

The reference decoder in `srfsc_sched_pkg` is written recursively from the algorithm and shares no code with the RTL. The expected values in the unit tests are computed inside the testbench.

## 6. Measured behaviour

These numbers come from `tb_srfsc_workloads`.

- The codes are N = 1024 Gaussian-approximation codes designed at 2.5 dB, with the 16-bit CRC. They are not the 5G codes.
- The thresholds are computed at 5 dB, and frames are decoded at 5 dB.
- Cycles include the CRC check.

| R | SR nodes (\|S\|>1) | EG-PC | general | SRFSC cycles | multi-stage, eps = 0.9 / 0.99 / 0.999 |
|---|---|---|---|---|---|
| 1/4 | 17 (14) | 23 | 24 | 253 | 95% / 69% / 73% |
| 1/2 | 20 (16) | 35 | 37 | 318 | 51% / 55% / 63% |
| 3/4 | 15 (11) | 27 | 32 | 272 | 56% / 62% / 75% |

The node counts are not comparable with published counts for the 5G codes. The codes differ, and here EG-PC nodes and Rate-0/Rate-1 leaves are counted apart from SR nodes, while the SR description can absorb them.

Each percentage is an average over only three frames. One R = 1/4 frame needed a second attempt, which raises its average. At R = 1/2 and epsilon = 0.9 the latency is about half that of plain SRFSC, the same size of saving as the original evaluation reports (57%).

## 7. Where this design departs from the original work, and limits

- **Cycle counts.** The original hardware needs 186 / 222 / 200 cycles for R = 1/4, 1/2, 3/4. The totals above are larger. They include N/P = 16 CRC cycles and a few control cycles, which the original counts leave out, and the decoder itself still needs more than the original. There are three reasons:
  - The codes here come from a Gaussian-approximation construction, not the 5G reliability sequence, so the trees differ.
  - Operations are not merged; there is no F×2 or G-F merging.
  - The cost model of each instruction is this design's own.
- **No pipeline registers in the trees.** The original work says pipeline registers are needed in the adder and compare-and-select trees to reach its clock rate. Here each tree is a single combinational stage. Cycle counts are therefore a little lower and the achievable clock lower; no frequency is claimed.
- **Path choice.** The SR path is chosen before the source node is decoded, as explained in section 4.
- **Not specified by the original work, so chosen here:**
  - the instruction set and memory layout
  - 8-bit quantisation with saturation
  - tie-breaking (lower index, lower position)
  - CRC bit order (message then CRC, in u order, register starting at zero)
  - the output stage (`polar_unpack`)
- **Off-line parts are software.** The schedule compiler and threshold computation are not hardware; a testbench-side model is provided.
- **Only two attempts.** A third attempt with a stronger decoder (such as list decoding) is suggested in the original work but not built.
- **Verification limits.** Each testbench runs a few dozen frames at most. Error rates (BLER) over many frames were not simulated.
