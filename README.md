# IR-HARQ support for fast polar SCL decoders

Incremental-redundancy HARQ for polar codes works by growing the code. Each
retransmission adds new coded bits, so the encoding matrix grows with it.
Some of the new bit channels are more reliable than old ones. These channels
(the *I_delta* bits) carry information bits. An equal number of old
information bits is then frozen, but not to zero: each one copies the value
of the I_delta bit it is paired with. These are the *PC_frozen* bits. The
known formulation of the scheme uses set operations. It also adds a third
bit type, so a fast node of 4 bits would have 81 variants instead of 16.
Both are a poor fit for hardware.

This RTL implements the hardware-friendly version of the scheme:

* All bit types are **binary vectors** updated by bitwise operations. A
  lookup table maps each I_delta bit to its PC_frozen bit. No set
  operations and no irregular memory accesses are needed.
* A PC_frozen bit is treated as **a kind of frozen bit**. A fast node still
  sees only information bits and frozen bits, so the decoder keeps the same
  set of node types as a plain SCL decoder. The PC_frozen values enter by
  linearity. The encoding of a node is
  `beta(s) = (info part) * G^s  XOR  (PC_frozen part) * G^s`.
  Each pre-computed candidate codeword of the node is therefore XOR-ed with
  the node's PC_frozen bits, encoded to stage `s`.
* After the list step, the decoded bits of each surviving path go back to
  stage 0. Every I_delta bit (and every PC_frozen bit that is itself a
  source) is then **routed** through the lookup table into that path's
  PC_frozen memory. A node decoded later reads its PC_frozen values there.

The RTL covers the parts that HARQ adds to a fast SCL decoder. These are the
bit-type generator with its lookup table, the per-path PC_frozen memory, and
the node unit that wraps the list step of every fast node. The conventional
SCL core is not included: LLR memory, f/g units, partial sums, the tree
scheduler and the fast-node candidate lists. Its node-level signals are
ports of the top module `harq_scl_ext`.

## Bit index convention

This is the part most easily got wrong.

Two orders are used:

* **Decoding order** `q`: position in the encoding tree from the left.
  `q = 0` is decoded first.
* **Bit index** `p`: the index the bit-type vectors use. It counts from the
  right end of the tree: `p = n - 1 - q`, where `n` is the current mother
  code length.

Indexing from the right keeps indices stable when the code grows. The first
transmission of `N^1` bits occupies `p < N^1`. Each retransmission adds the
indices from `N^{t-1}` to `N^t`. When the mother code doubles, the new half
lies on the left of the tree, at higher `p`, and no stored vector has to
move. Puncturing removes the leftmost bits, which are the highest `p` below
`n`. The I_delta bits are the information bits with `p >= N^1`.

PC_frozen bits (low `p`, right in the tree) are decoded after the I_delta
bits that feed them (high `p`, left in the tree). So in decoding order the
source always comes first.

Node-level vectors (`alpha`, `cand`, `beta`) use decoding order: bit `k` of a
node starting at `q0` is position `q0 + k`. The node unit does the
conversion to `p` itself.

## Bit types (`bit_type_gen`)

The generator stores three N-bit vectors:

* `fr`: 1 for any frozen bit, including rate-matched and PC_frozen bits.
* `rm`: 1 for rate-matched (punctured) bits.
* `pc`: 1 for PC_frozen bits.

It also stores `lut[p]`, the PC_frozen index fed by the I_delta bit `p`.
Three vectors are derived from these:

* `iv = ~fr`
* `fr_z = fr & ~pc`: frozen to zero.
* `id = ~fr` for `p >= N^1`, and 0 below.

A retransmission takes the plain construction (`fr_star`, `rm_star`) of a
code of length `N^t` with the same number of information bits, computed
without HARQ. The generator then builds the vectors in these steps:

1. `rm = rm_star`. For `p >= N^{t-1}`: `fr = fr_star` and `pc = 0`. The new
   part holds only I_delta bits and frozen bits, and this also extends the
   vectors when the mother code grows. This takes one clock.
2. Pointer `b` sweeps the new part `[N^{t-1}, N^t)` for I_delta bits
   (`~fr_star`).
3. Pointer `a` sweeps the old part for bits that were information bits and
   are frozen in the new construction (`~fr & fr_star`).
4. Each pointer moves one step per clock until it stops on a hit. When both
   have a hit, the pair is made: `pc[a] = fr[a] = 1` and `lut[b] = a`.

This pairs the k-th I_delta bit with the k-th candidate. Those are exactly
"the first |I_delta| old information bits that the new construction
freezes". The same selection can be written as a prefix count over the
vector. The sweep avoids that adder chain and takes at most `N^t` clocks.
Because the number of information bits stays the same, a partner always
exists. If an input breaks that rule, `err` goes high.

**Intra-node dependency.** The source and its destination may fall inside
the same fast node. The node decides all its bits at once, so the
PC_frozen bit cannot get its value in time. In that case the pair is
reversed: the I_delta bit becomes a zero frozen bit, and the candidate stays
an information bit. The real node partition of the decoder is not known
here, so nodes are taken as `NODE_SZ`-aligned blocks (16 by default).
Repetition and SPC nodes never show this dependency, and neither do Rate-0
and Rate-1 nodes. With 1024-bit retransmission steps it cannot occur at
all. It only occurs when a length step is not a multiple of the node size.

## Decoding a node (`harq_node_unit`)

For a node at decoding position `q0` and stage `s` (size `2^s <= NV`), the
unit goes through five phases:

| phase   | clocks | work |
|---------|--------|------|
| ascend + fork | 1 | Read each path's PC_frozen window, reorder it to decoding order and encode it with `G^s` (`polar_xor_tree`). XOR the result into the path's LA candidates and compute the forked metrics (`candidate_gen`). |
| select  | 1 | A bitonic sorter over the `L*LA` metrics keeps the best L (`path_sorter`). Each surviving path's PC_frozen row is replaced by its parent's row. |
| descend | 1 | Transform each survivor's `beta(s)` back to stage 0, using the same XOR array, because `G^s` is its own inverse. |
| route   | `2^s` | One node bit per clock, for all paths at once. If its index `p >= N^1` and it is an information or PC_frozen bit, write its value to `lut[p]` in that path's row. |

`done` pulses `4 + 2^s` clock edges after the edge that sampled `start`.
The outputs are `parent`, `csel` (which candidate), `beta` and `pm_out`.
They are ordered by metric, best first, and are valid until the next
`start`.

The forked metric is the parent metric plus `|alpha_k|` for every node bit
whose candidate bit disagrees with the sign of `alpha_k`. It saturates at
`2^QM - 1`. Candidates with an index of `n_cand` or more get the saturated
metric, so node types with fewer candidates than `LA` are never kept.

The SCL core must supply, per path:

* the node LLRs `alpha(s)`;
* the metric;
* the candidate codewords built from information bits only, with PC_frozen
  positions set to zero. These are the usual fast-node candidates (Rate-0,
  Rate-1, repetition, SPC).

It reads `fr`, `rm`, `pc` and `iv` to classify nodes exactly as it would
without HARQ.

## PC_frozen memory (`pcf_mem`)

The memory has L rows of N bits. `dec_init` clears it before each codeword.
It offers:

* one NV-aligned read window per row;
* a one-clock row copy that follows the survivor permutation (duplicates
  allowed);
* one routed write address per clock, shared by all rows, with a data bit
  and an enable per row.

## Top level (`harq_scl_ext`) and usage

1. For the first transmission, drive `fr_star`, `rm_star` and `n_len = N^1`,
   then pulse `gen_first`. This takes one clock.
2. For each retransmission, drive the new construction and `n_len = N^t`,
   pulse `gen_next`, and wait for `gen_done`. `gen_pairs` and `gen_fixes`
   count the pairs and intra-node fixes of the update.
3. For each codeword, pulse `dec_init`. Then request the fast nodes in
   decoding order with `node_start`. `n_mother` is derived as the smallest
   power of two `>= N^t`.

### Parameters (package `harq_pkg`)

| name | default | meaning |
|------|---------|---------|
| `N_MAX`   | 8192 | largest mother code: seven transmissions of 2048 + 6 x 1024 |
| `L_LIST`  | 8    | list size |
| `NV_MAX`  | 16   | largest node handed to the node unit |
| `LA_CAND` | 2    | candidates per path (chosen) |
| `QI_BITS` | 8    | internal LLR width |
| `QM_BITS` | 11   | path metric width |
| `NODE_SZ` | 16   | block size for the intra-node check (chosen) |

### Memory added by HARQ

The extra storage is `(L + 1 + ceil(log2 N)) * N` bits: L·N for the
PC_frozen values, N for the `pc` vector, and `N·log2 N` for the lookup
table. At the defaults that is `65536 + 8192 + 106496 = 180224` bits. At
N = 1024 it is 19 x 1024 bits. The `fr` and `rm` vectors are control
storage that a plain SCL decoder has anyway.

## Departures and own choices

* The index convention above is an interpretation. It is the reading under
  which the length ranges and the "puncture the leftmost bits" rule agree.
* PC_frozen bits are chosen by pairing (two pointers) instead of a parallel
  prefix adder. The result is the same, but generation is sequential.
* Routing is sequential, one bit per clock, instead of a multiplexer tree.
* Survivor rows of the PC_frozen memory are copied in one clock. How path
  duplication reaches this memory is otherwise open.
* `LA = 2`, `NV = 16` and the block-aligned node partition of the
  intra-node check are chosen values.
* The SCL core, the fast-node candidate generators, the code construction
  (Gaussian approximation in the original evaluation) and the HARQ encoder
  are not part of this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog. The shared
reference models are in `tb/harq_ref_pkg.sv`. They are written from the
definitions:

* the polar transform as a matrix product;
* the metric as a plain sum;
* the bit types with the set operations of the original scheme.

| testbench | what it checks |
|-----------|----------------|
| `tb_polar_xor_tree` | transform against the matrix, the involution property, and the worked example 0100… → 1100… at stage 4 |
| `tb_candidate_gen`  | the length-16 repetition node example (candidates 0011…1 and 1100…0), then random metrics including saturation |
| `tb_path_sorter`    | survivors against a selection sort, with many ties |
| `tb_pcf_mem`        | random clears, copies and writes against an array model |
| `tb_bit_type_gen`   | seven transmissions at N = 256 against the set model, the sweep bound, a forced intra-node dependency, and the error flag |
| `tb_harq_node_unit` | random nodes of all sizes against a full reference, latency `4 + 2^s` |
| `tb_harq_scl_ext`   | end to end at the default size, described below |

`tb_harq_scl_ext` runs the full evaluation sequence: a 2048-bit first
transmission with 1048 information bits, then six 1024-bit steps up to
8192. The testbench plays the transmitter: random information bits, and
every PC_frozen bit copied through the lookup table. It also plays the SCL
core. After each transmission it decodes one codeword, node by node. The
correct path must survive every node with the correct `beta`. That only
happens if all the earlier routing was right.

This testbench counts how often each mechanism occurs: pairing, intra-node
fix, mother-code growth, retransmission within one mother code, routed
bits and reordered survivors. A mechanism that never occurs counts as a
failure. The run takes about a second after compilation.

Example run with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/harq_pkg.sv tb/harq_ref_pkg.sv rtl/*.sv tb/tb_harq_scl_ext.sv \
      --top-module tb_harq_scl_ext -o sim && ./obj_dir/sim

To run another testbench, swap in its file and top module. Verilator has
two states, so every register that is read is reset. The lookup table is
left uninitialised on purpose, because it is read only at entries that
have been written.

What is not verified: error-correction performance. There is no channel and
no real SCL core here. The testbench stands in for the core with the known
correct path, and it uses a Hamming-weight reliability order in place of
the Gaussian-approximation construction.
