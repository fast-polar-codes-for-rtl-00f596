# Fast polar code decoders: a recursive and an unrolled fast-SC decoder for N = 1024

Successive-cancellation (SC) decoding of a polar code works through a binary tree. The root holds the
N channel LLRs. Every inner node splits its LLRs into a left and a right half-size child, and code bits
("partial sums") climb back up after each leaf is decided. How fast the decoder runs depends on how many
edges and nodes of that tree it must visit. *Fast* SC decoders cut the tree short at subtrees whose code
has a simple structure, such as all-frozen, all-information, repetition or single-parity-check. Those
subtrees are decoded in one step.

This design goes one step further and changes the **code** rather than only the decoder. Every
length-16 subtree of the code is forced to be one of ten patterns that a small combinational circuit can
decode at once. The tree is therefore never deeper than stage 4 (16 bits), and many subtrees stop
higher up. Two decoders are built around the same pattern decoders:

* **`rec_decoder`**: a small, flexible decoder. One 512-lane f/g processing array and one decision
  module walk the pruned tree, one edge per clock. The code (length 32 to 1024, any rate) is given at
  run time as a list of fast nodes. For the default N = 1024, K = 896 code it takes 43 cycles per packet.
* **`unrolled_decoder`**: a pipeline with one code hard-wired. Every tree edge has its own f/g array and
  pipeline register, and every leaf has its own pattern decoder. It accepts a new packet every clock
  cycle and returns each packet 44 cycles later.

`fast_polar_top` holds both decoders side by side.

All LLRs are 5-bit two's complement, kept in the symmetric range [-15, +15].

## 1. The ten node patterns

A length-M node (M = 2^s, "stage s") is described by which of its M input bits are information bits.
The code bits are x = u·G_M, where G_M = F^{⊗s} and F = [[1,0],[1,1]], and bit k is taken in natural
order. The patterns and their information-bit counts at M = 16 are:

| pattern | type code | info bits at M=16 | structure of the code | decoder |
|---|---|---|---|---|
| R0  | 0 | 0  | all zero | none; bypassed by the traversal |
| R1  | 1 | 16 | any word | hard decision (sign bit) |
| SPC | 2 | 15 | even parity | `spc_dec` |
| SPC-2 | 3 | 14 | even bits and odd bits each have even parity | `spc2_dec` = two SPC decoders |
| RPC | 4 | 13 | the four groups k mod 4 are SPC words; also x[k] xor x[k+4] is the same for all k in a group | `rpc_dec` |
| BCH t=1 | 5 | 11 | (15,11) BCH code plus one repeated bit | `bch_t1_dec` |
| BCH t=2 | 6 | 7  | (15,7) BCH code plus an overall parity bit | `bch_t2_dec` |
| PCR | 7 | 3  | x[k] = c[k mod 4], where c is a length-4 SPC word | `pcr_dec` |
| REP-2 | 8 | 2 | even bits equal, odd bits equal | `rep2_dec` = two REP decoders |
| REP | 9 | 1 | all bits equal | `rep_dec` |

Only R1 (up to 256 bits), SPC and SPC-2 (up to 128 bits), and REP (up to 16 bits) appear at sizes
other than 16. All the others appear at exactly 16. `node_dec` decodes any of the ten patterns, chosen
by `ntype` and `stage`:

* Smaller SPC and SPC-2 nodes are padded with +15. A padding lane can then never be the least reliable bit.
* Smaller REP nodes are padded with 0, which adds nothing to the sum.
* Lanes at or above 2^stage are forced to 0.

### 1.1 Finding the least reliable bit: `par_min`

The SPC, RPC and BCH t=2 decoders all need the position of the smallest |LLR|. A tree of comparators
would be slow at 128 inputs. `par_min` instead works one bit plane at a time, starting from the MSB.
It keeps a mask E of positions that are already known not to be minimal:

* At each plane j, it forms C = E | B_j, where B_j is bit j of every amplitude.
* If C is all ones, every remaining candidate has a 1 in this plane, so the plane tells nothing and E is left unchanged.
* Otherwise E becomes C.

After the last plane, `rmask = ~E` marks every position that holds the minimum. A second stage,
`onehot = rmask & -rmask`, keeps only the lowest of them. The logic depth is W planes of OR gates plus one
carry chain for the uniqueness stage, whatever M is. The minimum value itself (`min_val`) is read out
through the one-hot mask.

### 1.2 SPC, SPC-2, REP, REP-2

* **SPC** takes the sign bits. If their parity is odd, it flips the one-hot least reliable bit.
* **REP** sums all the LLRs at full width and takes the sign of the sum. A sum of 0 decodes as bit 0.
* **SPC-2 and REP-2** are, for these codes, exactly two independent half-size codes, one on the even
  bits and one on the odd bits. The decoders are two SPC or REP decoders on the two halves.

### 1.3 RPC: two interleaved parity structures

An RPC codeword splits into four groups g = 0..3 by k mod 4, with group i = (x[i], x[i+4], x[i+8], x[i+12]).
Two rules hold:

* each group has even parity;
* the four group parities taken on the other axis, p = x[0..3] ⊕ x[4..7] ⊕ ..., are all equal.

The decoder follows the paper's rule:

1. Compute the hard parity of each group.
2. For each group, find its least reliable bit and that bit's amplitude δ_g (one `par_min` per group).
3. Compute Δ0 as the sum of δ_g over the groups with odd parity, and Δ1 as the sum over the groups with even parity.
4. If Δ0 < Δ1, flip the least reliable bit of every odd group. If Δ1 < Δ0, flip that of every even group.
5. On an exact tie, flip nothing. This is the literal reading of the rule. The result is then not a codeword, which only happens on very unreliable input.

### 1.4 PCR

PCR is the reverse arrangement: a length-4 SPC word repeated four times.

1. The four groups by k mod 4 are summed, as a repetition code would be.
2. The four sums (8 bits, not re-saturated) go to a 4-input SPC decoder.
3. Each decided bit is copied back to its group.

### 1.5 BCH nodes

Between 7 and 11 information bits, no polar-style pattern of length 16 decodes quickly. Two extended
BCH codes fill this gap. Both use GF(16) with the primitive polynomial x^4+x+1. In each, code bit i of the
length-15 BCH word (coefficient of x^i) sits at node position i, and position 15 is the extension.

* **BCH t=1, (16,11)**
  * The code is the cyclic (15,11) Hamming/BCH code with generator x^4+x+1.
  * Position 15 repeats c_0. The decoder adds the two LLRs of c_0 before taking hard decisions, so the repeated bit adds reliability.
  * The syndrome S1 = r(α) is either 0, meaning no error, or α^e, which gives the position e of the single error. That bit is flipped, and position 15 is set equal to the corrected c_0.
* **BCH t=2, (16,7)**
  * The code is the (15,7) BCH code with generator x^8+x^7+x^6+x^4+1 (roots α, α^3 and their conjugates).
  * Position 15 is the overall parity bit. Decoding has two steps:
    1. **Parity step.** If the 16 hard bits have odd parity, an odd number of errors is likely. The least reliable of the 16 bits (found with `par_min`) is flipped.
    2. **Algebraic step** on the 15 BCH bits:
       * Compute S1 = r(α) and S3 = r(α^3).
       * S1 = S3 = 0 means no error.
       * S1 ≠ 0 and S3 = S1^3 means one error, at log S1.
       * Otherwise the error locator is σ(x) = x^2 + S1·x + (S3/S1 + S1^2), which is the Berlekamp–Massey result for binary t = 2. All 15 positions are tried in parallel (a Chien search). The errors are corrected only if the number of roots equals the degree of σ; otherwise decoding has failed and the word is left as it is.
       * Position 15 is then recomputed as the parity of the 15 corrected bits.

  The decoder is fully combinational, so it decides in the same clock cycle as the other patterns.

## 2. Making every segment decodable: the code construction

A normal polar code (chosen with polarization weights, PW) gives each length-16 segment whatever number of
information bits the channel reliabilities dictate. The construction used here moves information bits
between segments until every segment holds 0, 1, 2, 3, 7, 11, 13, 14, 15 or 16 of them.

1. Go through the segments from left to right.
2. Take the least reliable information bit of the current segment.
3. Make it frozen, and turn the most reliable still-frozen bit of a later segment into an information bit instead.
4. If no later segment can take the bit, an earlier one is used. This happens near the end of the code.

For those information-bit counts the segment's pattern is one of the ten in Section 1, with its
information bits at the positions the pattern needs. Sibling segments that together form a larger R0,
R1, SPC or SPC-2 node are merged into one node.

The default code, N = 1024 and K = 896, prunes to **23 nodes**. Their types and stages, in decoding order, are:

```
R0/4  REP/4  REP/4  BCH2/4  REP2/4  BCH2/4  BCH1/4  R1/4  PCR/4  BCH1/4  SPC2/5  SPC/6
PCR/4 SPC/4  SPC/5  R1/6    R1/7    BCH2/4  R1/4    R1/5  R1/6   R1/7    R1/8
```

The node-size bounds are what make this code work for the hardware: every leaf is at most 256 bits (R1),
128 bits (SPC, SPC-2) or 16 bits (everything else).

## 3. The schedule format

A code is passed to the decoders as a **schedule**: the leaves of the pruned tree in left-to-right
(decoding) order.

* Each entry is a `node_t`, 8 bits wide: `{ntype[3:0], stage[3:0]}`, where stage s means a node of 2^s bits.
* The leaves tile the codeword, so the node positions follow from the stages.
* In packed form (`sched_vec_t`, 512 bits) entry i is bits [8i+7 : 8i].

The default code packs to `512'h1817161514641716252474263554741454648464949404`.

`fp_pkg` has two helper functions for this format:

* `sched_find` returns the type of the leaf that starts at a given index with a given stage, or -1 if that subtree is not a leaf.
* `sched_lat` returns the pipeline depth of a subtree.

## 4. The recursive decoder (`rec_decoder`)

### 4.1 Datapath

* **Stage memories.** For each stage s below n there is a register of 2^s LLRs (5 bits each) and a register of 2^s partial-sum bits. The root LLRs are the captured channel input.
* **One PE array** (`fg_pe`, 512 lanes). It computes either f (min-sum) or g for the lower half of the lanes:
  * f(a, b) = sign(a)·sign(b)·min(|a|, |b|)
  * g(a, b, β) = b ± a, saturated to ±15
  * The operands come from the parent stage through an AND-OR selector indexed by the parent stage.
* **One decision module** (`node_dec`), fed directly from the PE output.
* **Partial-sum climb.** This is combinational, over all stages.

### 4.2 Traversal and timing

The controller keeps four values: the index of the current schedule entry, the bit position `idx` where
that node starts, the current stage `s`, and a pointer to the next node. Each cycle does one of three things:

1. **Descend one edge.** This is an f step if the target is a left child, or a g step (using the stored
   left-sibling partial sums) if it is a right child. The result is written into the child's stage memory.
2. **Decide.** When the edge just taken reaches the node's own stage, `node_dec` decides the node from the
   PE output in the same cycle. The decided bits then climb:
   * at every level where the subtree is a right child, β_parent = [β_left ⊕ β_right, β_right];
   * at the first level where it is a left child, the merged bits are stored for the later g step.
3. **Restart.** After a node, the next node starts at `idx + 2^stage`. The decoder climbs back (for free)
   to the stage given by the number of trailing zeros of the new index and descends from there.

**Rate-0 bypass.** An R0 node has a known answer (all zeros), but its LLRs are never needed. The decoder
descends only to the R0 node's parent stage and merges the zeros in the cycle that reaches that parent.
If the parent's LLRs are already in place, it spends one cycle on the merge without any PE work.

For node i with stage s_i at index idx_i, let cs_i = n for the first node, and otherwise tz(idx_i) + 1.
Then the node costs:

* max(1, cs_i − s_i) cycles if it is not R0;
* max(1, cs_i − s_i − 1) cycles if it is R0.

The cycle count of a packet is the sum of these costs. For the default code that is **43 cycles**. The
testbench checks that count exactly, for the default code and for 60 random codes.

**Interface.**

* To start a packet, pulse `start` for one cycle while `n_log`, `num_nodes`, `sched` and `ch_llr` are valid. They are captured, so the inputs may change on the next cycle.
* `busy` stays high while the decoder works.
* `done` pulses for one cycle with `x_hat`, the N estimated code bits.
* `node_done` and `node_type` report each decision, which is useful for monitoring.
* A new `start` is accepted in the cycle after `done`.

### 4.3 Why a one-cycle edge+decision is possible

All pattern decoders are combinational and shallow:

* `par_min` has a depth of about 4 OR planes plus the uniqueness carry chain;
* the BCH t=2 decoder is the deepest path (GF(16) multiplies and the Chien search).

So f/g followed by the decision fits in one cycle. Whether it fits at a given clock frequency is a question
for synthesis. The design does not break this path.

## 5. The unrolled decoder (`unrolled_decoder`)

`unrolled_node` builds the pipeline by instantiating itself recursively from the `SCHED` parameter, one
instance for each inner node of the pruned tree:

```
alpha ──► [f] ─reg─► left child  ──► beta_l ──► delay(1+L_r) ──┐
  │                                                            ├─► beta = {beta_r, beta_l ^ beta_r}
  └──► delay(1+L_l) ──► [g(beta_l)] ─reg─► right child ─► beta_r
```

* A leaf instantiates only the decoder for its pattern: `spc_dec`, `rpc_dec`, `bch_t2_dec` and so on, at
  its real size. Each leaf therefore has its own decoder.
* An R0 child is skipped entirely. Its β is constant zero and its f branch is not built.
* Every tree edge has one register, placed after its f or g array. Decisions and β merges are combinational.
* The `pipe_delay` shift registers line up the parent's LLRs with the left child's β, and the left child's β
  with the right child's β, so that every stage works on a different packet.

The depth of a subtree is L = L_left + L_right + 2, counting one register for each child edge. An R0
child counts as 0 and so does a leaf. For the default code the tree depth is 43. With the output register
that gives **44 cycles of latency** and 44 packets in flight, with one packet accepted and one delivered
every clock. `in_valid` travels with the data through a shift register to `out_valid`. The unrolled
decoder decodes the code given by its `SCHED`/`NNODES` parameters. Any other code needs a different
parameter value and a new build.

## 6. Files

| file | contents |
|---|---|
| `rtl/fp_pkg.sv` | LLR type, saturation, f/g, GF(16) arithmetic, node types, schedule helpers |
| `rtl/fg_pe.sv` | f/g processing array |
| `rtl/par_min.sv` | bit-plane minimum finder with unique-position stage |
| `rtl/spc_dec.sv`, `spc2_dec.sv`, `rep_dec.sv`, `rep2_dec.sv`, `rpc_dec.sv`, `pcr_dec.sv`, `bch_t1_dec.sv`, `bch_t2_dec.sv` | pattern decoders |
| `rtl/node_dec.sv` | decision module for all patterns, sizes up to 256 |
| `rtl/rec_decoder.sv` | recursive decoder |
| `rtl/unrolled_node.sv`, `rtl/pipe_delay.sv`, `rtl/unrolled_decoder.sv` | unrolled pipeline |
| `rtl/fast_polar_top.sv` | top level with both decoders |
| `tb/tb_ref_pkg.sv` | reference models: polar encoder, BCH encoder, codeword generators for every pattern |
| `tb/tb_*.sv` | one self-checking testbench per block |

## 7. Simulating

Every testbench generates its own stimulus from `$urandom`. It checks the outputs against reference
models that are independent of the RTL, and ends by printing `TB_RESULT checks=<n> failures=<n>`. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fp_pkg.sv tb/tb_ref_pkg.sv tb/tb_spc_dec.sv --top-module tb_spc_dec
./obj_dir/Vtb_spc_dec
```

Replace `tb_spc_dec` with any other testbench. Most of the testbenches send noisy codewords and check the
result against the pattern's reference decision or the transmitted word. `tb_rec_decoder`,
`tb_unrolled_decoder` and `tb_fast_polar_top` encode random information bits and add errors. They check
that the decoders return exactly the same word as a reference fast-SC decoder, and they check the cycle
counts (43 for the recursive decoder, 44 for the unrolled one, and back-to-back outputs). The top-level
testbench runs both decoders at full size (N = 1024) and counts the following events, failing if any
never happens:

* f steps and g steps;
* R0 bypasses;
* back-to-back pipeline outputs;
* decisions of every pattern.

Building the full-size testbenches takes a few minutes, mostly in the C++ compile.

To decode a different code:

* **Recursive decoder:** pass its schedule at run time.
* **Unrolled decoder:** set `SCHED` and `NNODES` to the packed schedule.

## 8. Where this design departs from, or adds to, the published description

* **Frozen set.** The published decoders use a code whose frozen set is not given. The code here is built
  as described in Section 2. It has 23 nodes and takes 43 cycles per packet on the recursive decoder.
  The published figures are 40 cycles for the recursive decoder and 25 packets in flight for the unrolled
  decoder. The published node counts for its own code are also not self-consistent: the total is given as
  22, the per-pattern counts add to 23, and the text says 21 node-specific decoders.
* **Unrolled latency.** It is 44 cycles here, because every tree edge has a register. How the published
  design placed its 25 register stages is not described.
* **f function.** Min-sum is used. The exact f is not specified.
* **Saturation.** LLRs saturate symmetrically at ±15.
* **Tie handling.**
  * Minimum search: the lowest index wins.
  * RPC tie: no flip.
  * REP zero sum: decodes as 0.
* **BCH details.** The generator polynomials, the bit order, which bit is repeated in the t=1 node, where
  the parity bit sits in the t=2 node, and the handling of decoding failures are all choices of this design.
* **Sharing between patterns.** In `node_dec` each pattern has its own decoder instance. Module-level
  reuse (SPC inside SPC-2 and PCR, REP inside REP-2) is kept, but there is no time-sharing between
  patterns in the decision module.
* **Rate matching.** The published design supports it (puncturing or shortening to any length up to
  1024), but describes nothing of how. It is not built. The recursive decoder takes mother code lengths
  32…1024.
* **Output.** Both decoders output the estimated codeword x̂. Recovering information bits from it is left
  to the surrounding logic.
* **Physical results.** Clock frequency, area and power depend on synthesis and layout, and nothing here
  reproduces them.
