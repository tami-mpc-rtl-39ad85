# Receiver-side accelerator for one-round secure comparison (TAMI-MPC)

Two parties hold secret shares of values that they must compare, for example
the input to a ReLU in private neural-network inference. They want the
comparison result, also as shares, without revealing anything else. The usual
method is the Millionaires' protocol. It cuts a 32-bit value into n = 8 chunks
of k = 4 bits. It compares each chunk pair with an oblivious transfer, the
*leaf comparison*. It then merges the n leaf results with a tree of secure
multiplications, the *tree merge*. That costs two online rounds for the leaves
and log2 n rounds for the merge, and it needs a lot of correlated randomness.

TAMI-MPC moves every input-independent value into a trusted execution
environment (TEE). Both parties run a TEE with synchronized seeds, so each side
can derive these values locally without exchanging messages:

- the OT choice bits and the receiver's mask chunks x_j;
- the sender's leaf shares;
- shares of all subset products of the tree-merge masks r_j.

With these values ready, a leaf comparison takes one online message, from
the sender to the receiver. The tree merge takes one message as well, from the
receiver to the sender: the masked bits lt_j xor r_j of all n leaves at once.
Each side then evaluates the product locally.

This RTL is the accelerator on the receiver side (the client) of that
protocol. It has two parts:

1. **Leaf comparison.** An AES-based correlation-robust hash (CRH) turns
   correlated-OT material into one-bit masks. The receiver uses each mask to
   open the sender's message, which gives its share `<lt_j>_R` of one leaf bit
   `1{y_j < x_j}`.
2. **Tree merge.** The leaf shares of 64 comparisons are packed into one
   512-bit word. The unit masks them and sends the masked word to the sender.
   It then reconstructs `t_j = lt_j xor r_j` and evaluates the merge polynomial
   bit-sliced over all 64 comparisons at once. The result is one output share
   bit per comparison.

The correlated-OT generator, the TEE (its PRG, seeds and randomness
generation), the sender, and the host/AXI infrastructure are outside this
design. Their data arrives and leaves on plain valid/ready streams.

```
 req (key, block) ──► layout_adaptor ──► crh_core (4 lanes) ──┐
                                                              ▼
 x (chunks), m (messages) ─────────────────────────► fcomp_decrypt ──► <lt_j>_R words
                                        leaf_compare                      │
                                                                          ▼
                                                             data_type_adapter
                                                                          │ 512-bit packed word
 rnd (subset-product shares) ──► tm_prefetch (2 banks) ──┐                ▼
                                     │ singles           └──────────► tm_mask ──► tx (to sender)
                                     │ all shares                         │
 s (sender term, from the TEE) ──────┼──────────────────────────► tm_reconstruct
                                     ▼                                    │ t_j
                     polymult_lut ─► polymult_eval (LC units + XOR) ◄─────┘
                                          │
                                     write_back ──► out (output shares)
                                    tree_merge
```

## The correlation-robust hash and its interleaved key schedule

The CRH computes `H(key, x) = AES-128_key(x) xor x`. Each block is hashed under
its own key, so a software implementation runs the whole key expansion first,
stores the round keys and then encrypts. `crh_lane` stores no key schedule.
After the key is loaded, each clock cycle does two things at once:

- it computes round key r+1 from round key r;
- it applies AES round r with round key r.

A block therefore takes 12 cycles: one key-expansion step (loading round key
0), then 11 AES rounds (the first AddRoundKey and rounds 1 to 10). `crh_core`
runs four lanes in lockstep on four independent blocks. This is the
interleaved schedule "K_{l,r} next to A_{l,r-1}" for lanes l = 0 to 3. It
accepts a new batch in the same cycle that it hands over the previous one. The
throughput is therefore 4 blocks per 12 cycles.

The AES round functions (S-box, ShiftRows, MixColumns, key step) live in
`tami_pkg`. The S-box is computed at elaboration from its definition:
inversion in GF(2^8) modulo x^8+x^4+x^3+x+1, then the affine map with
constant 0x63. No table is written out.

The final XOR with the input block is the usual way to build a hash from a
block cipher (Matyas-Meyer-Oseas). The paper's diagram draws a two-input gate
at this point but does not name its type. The XOR is this design's reading of
that gate.

`layout_adaptor` collects the incoming requests, one per cycle, into batches
of four: request q of a batch goes to lane q.

## Leaf comparison: opening one message out of sixteen

For leaf j the sender sends 16 one-bit messages
`m_i = 1{y_j < i} xor <lt_j>_S xor u_(tmp xor i)`. The receiver knows its chunk
x_j and the mask u_c. It computes `<lt_j>_R = m_(x_j) xor u_c`.
`fcomp_decrypt` handles 32 leaves per 512-bit message word (32 x 16 bits). The
word layouts are:

| stream | bits of leaf q |
|---|---|
| message word `m_data` | `[q*16 +: 16]`, message i at bit `q*16+i` |
| chunk word `x_data` | `[q*4 +: 4]` |
| leaf-share word `lt_data` | bit `q` |
| mask u_c | bit 0 of the hash of the q-th request of the word's group of 32 |

A word needs 32 hashes, which is 8 CRH batches or 96 cycles. The leaf
comparison is therefore limited by the hash. The `mask_wait` output is high
whenever a message word is ready but its masks are not. This matches the
paper's own observation that the CRH is the bottleneck of the leaf
comparison.

With n = 8, a leaf-share word holds 4 comparisons: comparison c, chunk j at
bit `c*8 + j`.

## Tree merge: the one-round polynomial

### What is computed

The merge polynomial is given by an exponent matrix E with m rows over n
variables:

```
F = XOR_i  AND_{j in A_i} lt_j        A_i = { j : E[i][j] > 0 }
```

All values are bits, so an exponent above zero only marks a variable as
active. The default is one row holding all eight leaf bits, `F = prod_j lt_j`:
all n leaf results are merged at once. Other polynomials are set with the
`M`, `N` and `EXP` parameters.

### Why one round is enough

Each party holds shares of random bits r_j. It also holds shares `<r_S>` of
every subset product `r_S = prod_{j in S} r_j`. The receiver sends
`<lt_j>_R xor <r_j>_R`. The sender's matching term `<lt_j>_S xor <r_j>_S` comes
from the receiver's own TEE, because the sender's leaf shares are themselves
derived from the synchronized seed. After this single exchange, both parties
know `t_j = lt_j xor r_j`. Then

```
prod_{j in A} lt_j = prod_{j in A} (t_j xor r_j)
                   = XOR_{S subset of A} r_S * prod_{j in A\S} t_j
```

so party p computes its share locally:

```
<F>_p = XOR_i [ p * prod_{j in A_i} t_j   XOR   XOR_{S nonempty subset of A_i} <r_S>_p * prod_{j in A_i\S} t_j ]
```

Only party 1 adds the public term. Which party runs this receiver is a run-time
input, `party`.

### Randomness reuse and addressing

A subset S that is contained in several rows' active sets needs only one
share `<r_S>`. The number of shares to generate per comparison is therefore
the number of distinct non-empty subsets of the sets A_i. This count equals the
paper's inclusion-exclusion count. For the paper's example matrix
`[1 3 0 2; 0 2 1 2; 1 1 2 0]` it is 13 shares instead of 21. The default
product needs 255 shares.

The shares are stored at compact addresses, ranked by the subset's bit mask,
smallest first. The randomness source must stream them in that order.

### How the evaluation runs

The sequence of terms and addresses does not depend on the data. `polymult_lut`
is a ROM that `polymult_pkg` functions fill at elaboration. Each entry holds:

- the subset S;
- the public factors A_i \ S;
- the public-term flag;
- the share address.

`polymult_eval` runs `LC` local-computation units, 4 by default. Each cycle,
each unit takes one LUT entry and forms `<r_S> AND prod t_j` over a whole P-bit
vector. An XOR tree folds the LC terms into an accumulator. The default has 256
terms (255 subsets plus the public term), so a batch takes 64 cycles plus one.

### Packed execution

With n = 8, one 512-bit word holds P = 512/n = 64 comparisons.
`data_type_adapter` transposes 16 leaf-share words into `pk[j][c]`: the same
chunk j of all 64 comparisons sits in one contiguous 64-bit lane. Every
operation of the tree merge is then a bitwise operation on 64-bit vectors. The
shares are stored the same way: one 64-bit entry per subset, one bit per
comparison.

### Buffers and ordering

`tm_prefetch` holds two banks of 255 x 64 bits. It fills one bank from the
`rnd` stream while the other bank serves the batch being evaluated. When the
evaluation releases its bank, the two banks swap roles.

`tree_merge` masks a new batch only after the previous batch has released its
bank. This keeps the mask and the evaluation of a batch on the same shares.
The `rand_wait` output is high while a packed word waits for its shares.

`write_back` puts 8 batch results (8 x 64 bits) into one 512-bit output word,
batch b at bits `[b*64 +: 64]`.

## Streams and timing of the top, `tami_top`

All streams are valid/ready; a transfer happens on a clock edge where both
are high.

| port | dir | width | per | content |
|---|---|---|---|---|
| `req` | in | 256 | leaf OT | `{key, blk}` for the CRH, in leaf order |
| `x_data` | in | 128 | message word | receiver chunks x_j of 32 leaves |
| `m_data` | in | 512 | message word | sender's 16 messages of 32 leaves |
| `rnd_data` | in | 64 | share | `<r_S>_R`, 255 per batch, in address order |
| `tx_data` | out | 8x64 | batch | `<lt_j>_R xor <r_j>_R`, to the sender |
| `s_data` | in | 8x64 | batch | `<lt_j>_S xor <r_j>_S`, released by the TEE |
| `out_data` | out | 512 | 8 batches | output shares, one bit per comparison |
| `party` | in | 1 | static | 1 if this side adds the public term |
| `mask_wait`, `rand_wait` | out | 1 | cycle | stall flags |

Throughput at the defaults:

- **Leaf comparison:** 96 cycles per message word. That is 1536 cycles per
  batch of 64 comparisons, or 24 cycles per 32-bit comparison.
- **Tree merge:** a batch needs about 70 cycles once its shares are in place.
  Receiving the 255 shares over the 64-bit `rnd` stream takes 255 cycles, but
  this happens during the previous batch. Both numbers are far below the leaf
  comparison's 1536 cycles per batch, so the leaf comparison sets the rate.
- **One output word:** 8 x 1536 = 12288 cycles.

Reset (`rst_n`, active low) is asynchronous and clears all control state. The
share banks are not reset: they are always written before they are read.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `K` | 4 | bits per chunk (2^K messages per leaf OT) |
| `N` | 8 | chunks per comparison = variables of the polynomial |
| `LANES` | 4 | CRH lanes |
| `BUS_W` | 512 | memory word; sets 32 leaves per message word and P = BUS_W/N |
| `M`, `EXP` | 1, all-ones row | merge polynomial as an exponent matrix (`polymult_pkg::exp_mat_t`, up to 8 x 16) |
| `LC` | 4 | local-computation units in the evaluator |

`polymult_pkg::num_rand` (shares per batch), `num_rand_noreuse` and `num_terms`
give the sizes that a matrix implies.

## Where this design departs from or goes beyond the source description

- **Merge polynomial.** The default merge is the product of all n leaf bits,
  as the protocol is described. A complete less-than merge also needs
  per-chunk equality bits. The described leaf comparison does not produce
  them, so they are not built. The evaluator accepts any Boolean polynomial
  through `EXP`.
- **CRH cycle count.** The analytical CRH cost in the source is
  max(13N/4, 18N/4) cycles for N blocks. That figure belongs to a high-level
  synthesis schedule. This RTL takes 12N/4 cycles, with a key step and an AES
  round in the same cycle.
- **CRH construction.** These points are this design's choices:
  - the XOR that closes the hash;
  - the per-request key;
  - truncating each hash to its lowest bit to form the one-bit mask;
  - one hash per leaf OT.

  How the 2^k-message OT masks are derived from k correlated OTs is not
  described. Here one hash per leaf stands in for that derivation.
- **Public term of the share equation.** In the worked three-term example of
  the source, the party factor p appears on the all-random term r0r1r2. The
  expansion requires it on the all-public term, and that is what is built.
- **Streams, buffers and layouts.** All of these are this design's choices:
  - the valid/ready streams;
  - the word and bit layouts;
  - the ping-pong share banks;
  - the one-batch-in-flight rule;
  - the number of local-computation units.
- **The gap between F_Comp and the CRH box.** The CRH appears twice in the
  block diagram: once as a detailed box, once inside the comparison unit. Here
  both are the same `crh_core`.
- **Ring polynomials.** Softmax and GeLU also use arithmetic polynomials over
  rings, such as reciprocal and exponential. These are not supported: the
  evaluator works over GF(2) only.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=F` and has a watchdog. The expected values are
computed independently of the RTL, as follows.

**Reference AES.** `tb_aes_ref_pkg` is a separate AES-128 written differently:

- its S-box comes from exp/log tables;
- it expands the full key schedule before encrypting;
- it works on a byte array.

It is checked against the FIPS-197 example.

**CRH (`tb_crh_core`).** Checks the FIPS-197 vector, random batches, the
12-cycle batch latency and output holding under backpressure.

**Leaf comparison (`tb_leaf_compare`).** The testbench plays the sender and
checks `<lt>_R xor <lt>_S = 1{y < x}` for every leaf. It also checks the
96-cycle word period.

**Polynomial evaluation (`tb_polymult_eval`, `tb_polymult_lut`).** Two
evaluators, one per party, receive shares of the same random subset products.
The tests check:

- that the two output shares XOR to the true polynomial;
- each share against the share equation;
- the `ceil(T/LC)+1` latency.

They run on both the default product and the paper's three-row example. The
LUT test counts 24 terms, 3 public terms and 13 distinct share addresses for
that example.

**End to end (`tb_tami_top`, at the default parameters).** The testbench plays
the correlated-OT generator, the TEE and the sender. It runs 1536 comparisons
(3 output words), the first word as party 0 and the rest as party 1. For every
batch it checks:

- the masked word sent out;
- the receiver's output share against the share equation;
- that the receiver's share XORed with the sender's share equals the product
  of the true leaf bits.

It also checks the overall cycle budget. It counts that each of these
happened at least once:

- the CRH mask wait;
- the randomness wait;
- prefetching of the next bank;
- backpressure on the sender link and on the output;
- the public term.

**End to end, reuse (`tb_tami_top_reuse`).** Runs the same checks with the
paper's three-row matrix (16-bit comparisons, 128 per batch). It confirms that
8 of the 21 subset terms reuse a share that another row also uses.

**Other blocks.** The adapter, prefetch, mask, reconstruct, write-back and
tree-merge testbenches check layouts, ordering, handshakes and stalls.

### Simulating

The testbenches need Verilator 5 with `--timing`. Packages have to come first
on the command line. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/tami_pkg.sv rtl/polymult_pkg.sv tb/tb_aes_ref_pkg.sv \
    tb/tb_tami_top.sv --top-module tb_tami_top
./obj_dir/Vtb_tami_top +verilator+rand+reset+2
```

Replace `tb_tami_top` with any other testbench name. The default end-to-end
run takes well under a second of simulation time. To lint a module:

```
verilator --lint-only -Wall -Irtl -y rtl rtl/tami_pkg.sv rtl/polymult_pkg.sv rtl/tami_top.sv
```

Expect the following warnings, which are understood:

- unused package constants;
- the unused upper half of a 16-bit mask variable in the LUT builder, when N = 8;
- an unused `smask` LUT field;
- `rst_n` used both as an asynchronous reset and in assertion `disable iff`
  clauses.

## Files

| file | content |
|---|---|
| `rtl/tami_pkg.sv` | sizes, request type, AES/GF(2^8) functions |
| `rtl/polymult_pkg.sv` | exponent matrix, term enumeration, reuse count, address rule |
| `rtl/crh_lane.sv`, `rtl/crh_core.sv` | one interleaved key-expansion/AES lane; four-lane CRH |
| `rtl/layout_adaptor.sv` | request stream to lane batches |
| `rtl/fcomp_decrypt.sv`, `rtl/leaf_compare.sv` | message opening; leaf-comparison module |
| `rtl/data_type_adapter.sv` | packing/transposition of 64 comparisons per word |
| `rtl/tm_prefetch.sv`, `rtl/tm_mask.sv`, `rtl/tm_reconstruct.sv` | tree-merge exchange stages |
| `rtl/polymult_lut.sv`, `rtl/polymult_eval.sv` | term ROM; packed evaluator with XOR reduction |
| `rtl/write_back.sv`, `rtl/tree_merge.sv` | output packing; tree-merge module |
| `rtl/tami_top.sv` | top |
| `tb/tb_*.sv` | testbenches; `tb_top_driver` and `tb_pm_pair` are shared drivers, `tb_aes_ref_pkg` the reference AES |
