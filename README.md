# A pipelined soft-input IUPA decoder for third-order Reed-Muller codes

This is synthesizable SystemVerilog for a decoder of the Reed-Muller code
RM(m,3), length n = 2^m, built with iterative *unique* projection aggregation
(IUPA). The default build is RM(6,3): a 64-bit codeword carrying 42 message bits.
It takes 5-bit channel LLRs and runs two iterations with 12 processing units (PUs)
per iteration. A new codeword enters every 64 cycles. The architecture is the
one proposed in "Hardware Implementation of Projection-Aggregation Decoders for
Reed-Muller Codes". Where that description leaves something open, this RTL makes
its own choices, and the sections below say which.

## The decoding idea in one page

Projection-aggregation decoders turn one hard problem into many easy ones. A
coordinate of the received vector is an element z of F_2^m. Projecting onto
a one-dimensional subspace B_k = {0, k} pairs each z with z ^ k. The two LLRs
of a pair are merged with the min-sum rule:

    L_k(coset) = sign(L(z)) * sign(L(z^k)) * min(|L(z)|, |L(z^k)|)

The result is a noisy codeword of RM(m-1, r-1), half as long and one order lower.
For a third-order code this is done twice:

1. **Third order.** The input is projected onto the 2^(m-1)-1 rows B_j
   (j = 1 .. 2^(m-1)-1) that matter, which gives vectors of 2^(m-1) LLRs from
   RM(m-1,2).
2. **Second order.** Each of those vectors is projected again onto
   one-dimensional subspaces, which gives first-order vectors of 2^(m-2) LLRs.
3. **First order.** These are decoded exactly by a fast Hadamard transform.

Each decoded projection then "votes" on the vector it came from
(pre-aggregation). For coordinate z this vote is

    (1 - 2 c([z + B_k])) * L(z ^ k)

that is, the partner's LLR with its sign flipped when the decoded bit is 1. The
votes are averaged, and the average is the refined LLR vector. A second-order
vector gets a hard decision from its averaged votes. The third-order average is
the iteration's output, and it is fed into the next iteration.

Second-order projections are very redundant. Row j and column k of the
"redundancy matrix" give the same first-order vector as other (row, column)
pairs. The unique-projection idea decodes each distinct first-order vector only
once.

- Columns 2^(m-2) .. 2^(m-1)-1 (the right half) always give unique vectors.
- Every left-half entry occurs three times.

Splitting the rows into G groups lets G second-order decoders run in parallel.
Each group gets only the left-half columns it actually needs, plus a fixed block
of PUs for the right half.

## Block structure

```
iupa_decoder                       NITER unrolled iterations, Q-bit clamp between them
 └─ iupa_iteration                 one iteration
     ├─ iupa_ctrl                  third-order control: accepts a codeword, steps R row slots
     ├─ reg_array (2 x n)          third-order register array, read by pre-aggregation
     ├─ per group g = 0..G-1
     │   ├─ projection_unit        third-order projection onto B_j, j = g*R + slot
     │   ├─ second_order_decoder   group decoder ("second-order IUPA(g)")
     │   │   ├─ reg_array          second-order register array
     │   │   ├─ pu  x PL           left-half columns  -> adder_tree
     │   │   ├─ pu  x PR           right-half columns -> divider_tree, x PR by shifting
     │   │   └─ accumulator over LAMBDA cycles, hard decision
     │   └─ preagg_unit            third-order pre-aggregation
     ├─ divider_tree               average of the G group outputs of one slot
     └─ seq_divider                sequential average of the R slots
pu = projection_unit -> fod -> preagg_unit
```

`rm_pkg` holds the coset numbering and the allocation functions. Each file
starts with a header that describes its module's interface and timing.

## Coset numbering

Projection needs a numbering of the 2^(m-1) cosets {z, z ^ k}. Everything else
depends on this choice: the crossbars, the extension of decoded bits back to
full length, and which (row, column) pairs give equal first-order vectors. This
design numbers a coset as follows:

1. Take the member whose bit h = hibit(k) is 0.
2. Delete that bit.

The map is linear with kernel {0, k}, so a projected codeword is again a
Reed-Muller codeword in the natural coordinate order. With this numbering, the
redundancy matrix keeps the shape the allocation relies on. Right-half columns
are unique, left-half entries repeat. Row j combined with column k gives the
same first-order vector as other pairs exactly when their two-dimensional
subspaces agree. All crossbars are fixed wiring generated from `coset_idx`. No
table is stored.

## How projections are shared out (the hardest part)

The published architecture sizes each group from an integer linear program
(ILP) solved offline. The ILP chooses which rows form group g and which
left-half columns that group must decode. Its solutions are not given for the
synthesised sizes, so this design uses a closed-form rule in `rm_pkg`:

- **Rows.** Group g takes rows g*R .. g*R+R-1, with R = 2^(m-1)/G. Row 0 is a
  dummy: its projection is all zeros. It pads the count to 2^(m-1), so every
  divider stage averages a power of two.
- **Left-half columns.** Group g takes columns 2^floor(log2 jmin) .. 2^(m-2)-1,
  where jmin is the group's smallest real row. This applies the
  unique-selection rule "row b needs only columns >= 2^floor(log2 b)" to the
  whole group. Every row of a group is decoded with all of the group's columns.
- **PUs.** Each PU serves LAMBDA consecutive columns, one per cycle. This gives
  PL = ceil(#left columns / LAMBDA) and PR = 2^(m-2)/LAMBDA.

The rule gives the same PU counts as the published ILP results in all but one
configuration:

| code    | (G, lambda) | PUs/iteration here | published |
|---------|-------------|--------------------|-----------|
| RM(6,3) | (2,8)       | 6                  | 6         |
| RM(6,3) | (2,4)       | 12                 | 12        |
| RM(6,3) | (4,8)       | 11                 | 12        |
| RM(6,3) | (2,2)       | 24                 | 24        |
| RM(7,3) | (2,16)      | 6                  | 6         |
| RM(7,3) | (2,8)       | 12                 | 12        |
| RM(7,3) | (2,4)       | 24                 | 24        |

With G = 2, group 1 (rows 2^(m-2) and up) needs no left-half columns at all,
only the right-half block.

Inside a group, the two segments are combined as follows:

1. The left-segment PU outputs are summed at full precision (`adder_tree`).
2. The right-segment outputs are averaged pairwise (`divider_tree`). The
   average is then multiplied back by PR through a left shift.
3. Both results are added, and an accumulator collects them over the LAMBDA
   cycles of one row.

The sign of the final sum is the hard decision; a zero sum decides 0. Because
of the floors in the divider tree, the right half is counted with a small
rounding error. The reference model in the testbenches reproduces that error
exactly.

## Timing

All groups run in lockstep, one row slot every LAMBDA cycles.

| quantity | value at defaults | formula |
|----------|-------------------|---------|
| insertion interval | 64 cycles | n*LAMBDA/(2G) = R*LAMBDA (as published) |
| second-order decoder | LAMBDA + 6 cycles | 1 (projection) + 4 (first-order decoder) + 1 (pre-aggregation) + LAMBDA |
| one iteration | 79 cycles | R*LAMBDA + log2(R) + 11 |
| decoder (2 iterations) | 158 cycles | NITER * (R*LAMBDA + log2(R) + 11) |

The published latency formula gives 81 cycles per iteration (164 for two) at the
default size. The control details behind that figure are not described. This
pipeline's own register placement ends two cycles earlier. The other published
configurations differ in the same way:

| code    | (G, lambda) | latency here | published |
|---------|-------------|--------------|-----------|
| RM(6,3) | (2,8)       | 286          | 294       |
| RM(6,3) | (4,8)       | 156          | 170       |
| RM(6,3) | (2,2)       | 94           | 98        |
| RM(7,3) | (2,16)      | 1056         | 1072      |
| RM(7,3) | (2,8)       | 544          | 552       |
| RM(7,3) | (2,4)       | 288          | 292       |

The first-order decoder is given 4 pipeline stages:

1. the first half of the Hadamard butterflies;
2. the rest of the butterflies;
3. the maximum-magnitude search, where the lowest index wins ties;
4. codeword generation.

The source allows 3 or 4 stages. Four is the value for which its latency
formula reproduces its own latency tables.

Interface handshake:

- An input is taken on `in_valid && in_ready`.
- `in_ready` is high while the first iteration is idle, or in the last cycle of
  the codeword it is working on.
- `out_valid` is a one-cycle pulse, with no back-pressure.
- Later iterations cannot stall, and an assertion checks this.

The third-order register array has two entries. One holds the codeword being
projected. The other holds the previous codeword, whose pre-aggregation
finishes while the next one starts.

## Number formats

| signal | format |
|--------|--------|
| channel LLRs | Q = 5 bits, two's complement; read as Q(3:2) (3 integer, 2 fractional bits) |
| min-sum | magnitude of -16 saturates to 15, so a projection stays at Q bits |
| pre-aggregated values | Q+1 bits |
| second-order sums | full precision |
| averages | floor((a+b)/2) per tree level |
| iteration output | Q+1 bits; clamped to Q bits before the next iteration |

The clamp never changes a value. The all-zero dummy vector is one of the
2^(m-1) averaged vectors, so the magnitude stays below 2^(Q-1). The top-level
testbench checks this.

## Where this departs from the published design

- **Row/column allocation.** This design uses the closed-form rule above
  instead of ILP solutions. For RM(6,3) with (G, lambda) = (4,8) it uses 11
  PUs where the ILP used 12.
- **Latency.** See the timing section.
- **Right-half column range.** The text gives this range once as
  2^(m-2) .. 2^(m-1) and once, in a figure, as 2^(m-2) .. 2^(m-1)-1. The
  second is used.
- **Redundancy matrix size.** The text states it as (2^(m-1)-1) x (2^(m-1)-2).
  The design uses 2^(m-2)-1 left columns, which agrees with the stated column
  set C = {1 .. 2^(m-2)-1}.
- **Divider tree levels.** The sequential divider tree is described as
  covering the "last m - log2 G levels". Averaging 2^(m-1) vectors takes only
  m-1 levels, so this design uses log2 G combinational levels followed by
  m-1-log2 G sequential ones.
- **Details the source leaves open.** Reset, handshakes, tie-breaking in the
  first-order decoder, and the control units' internal sequencing are this
  design's own choices.
- **Not included.** The offline ILP, and the CPA and IPA decoders that the
  source compares against.

## Verification

Every module has a self-checking testbench in `tb/`. The testbenches compare
against a behavioural reference in `tb/iupa_ref_pkg.sv`. That reference is
written independently of the RTL: plain loops, brute-force first-order
decoding, and explicit coset arithmetic. It has the same floors and saturation
as the RTL.

- **`tb_iupa_decoder`** runs the default build end to end on 13 frames: clean
  ones, noisy ones, back-to-back ones, and an all-ones frame at full scale. It
  checks:
  - bit-exact LLR output and hard decisions;
  - the 158-cycle latency and the 64-cycle insertion interval;
  - that up to 3 sign errors are corrected.

  It also counts input stalls, overlapping codewords, dummy-row slots and
  full-scale values. It fails if any of these never occurs.
- **`tb_iupa_workloads`** runs one iteration of RM(6,3) at (2,8), (4,8) and
  (2,2), and of RM(7,3) at (2,16), with the same checks, plus the PU count. The
  RM(7,3) configurations (2,8) and (2,4) are not simulated.
- **Per-module testbenches** use small sizes (for example m = 5) so they build
  quickly.

Every testbench ends with a line `TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5, for example for the full decoder:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rm_pkg.sv tb/iupa_ref_pkg.sv tb/tb_iupa_decoder.sv \
    --top-module tb_iupa_decoder -o sim
./obj_dir/sim
```

- Any other testbench works the same way: name `tb/<tb>.sv` and its
  `--top-module`.
- `tb_iupa_workloads` also needs `tb/iupa_workload_runner.sv`. `-Irtl -Itb`
  lets Verilator find the remaining modules by name.
- Building the full decoder takes a few minutes, mostly in the C++ compiler.
  Add `-j 0` to compile in parallel.

## Changing the configuration

`iupa_decoder` takes M, Q, G, LAMBDA and NITER as parameters. They must satisfy
these constraints, which `iupa_iteration` checks with assertions at the start
of simulation:

- G is a power of two, at least 2.
- R = 2^(m-1)/G >= 2.
- LAMBDA is a power of two, at most 2^(m-2).

Everything else is derived from these parameters: the allocation, the PU
counts, the register-array depths and the divider levels.
