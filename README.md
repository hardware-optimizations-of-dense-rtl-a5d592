# A dense binary hyperdimensional classifier with rematerialized hypervectors

This is synthesizable SystemVerilog for a hyperdimensional (HD) classifier.
It learns and recognizes patterns in multichannel sensor streams. The reference
task is five hand gestures read from four EMG sensors. The classifier works on
8192-bit binary *hypervectors*, and it follows one rule throughout: **store as
few hypervectors as possible**.

- The item memories that would hold the random seed hypervectors are replaced by
  logic that *rematerializes* them each time they are needed. This logic is a
  manipulator: an OR-XOR network wired by a constant connectivity matrix. A
  rule-30 cellular automaton is offered as an alternative.
- Class prototypes are learned by *binarized back-to-back bundling*. This keeps
  a single 8192-bit register and needs no per-bit counters.
- The associative memory computes Hamming distances with adder trees. This
  takes one cycle per class (vector-sequential) or one cycle in total
  (combinational), not one cycle per bit.

The method comes from M. Schmuck, L. Benini and A. Rahimi, "Hardware
Optimizations of Dense Binary Hyperdimensional Computing: Rematerialization of
Hypervectors, Binarized Bundling, and Combinational Associative Memory". The
authors published a VHDL library. The RTL here is an independent
re-implementation written from the publication's text and figures. Where the
publication leaves details open, the choices made here are listed in
[Departures and filled-in details](#departures-and-filled-in-details).

## Hypervector arithmetic used here

All hypervectors are D-bit words with random-looking, independent bits. Two
unrelated hypervectors differ in about D/2 bits. For D = 8192 the difference
is almost always within D/2 ± 6·√D/2, and such vectors count as *orthogonal*.

| operation | written | hardware |
|---|---|---|
| binding | A ⊗ B | bitwise XOR |
| bundling | A ⊕ B ⊕ … | bitwise majority |
| permutation ρ | ρ(A) | rotate left by one bit |
| similarity | d(A,B) | popcount(A XOR B), the Hamming distance |

## Data flow

```
 quantized channel values          record R[t]        trigram / prototype        label, distance
 (NC x 0..Q-1) ──► spatial encoder ──────────► temporal encoder ──────────► associative memory ──►
                   hd_spatial_man               hd_temporal_b2b              hd_am_vs
                   (or hd_spatial_ca)           = hd_ngram + hd_b2b_bundler  (or hd_am_cmb)
```

Every arrow is a valid/ready handshake carrying a hypervector. A control word
(`hd_ctrl_t`) travels with it. The stages run independently, and a stage stalls
when the next one is busy.

1. **Spatial encoder.** Channel k carries a value v, which maps to a signal
   hypervector S_v. Neighbouring values get similar vectors, and S_0 and
   S_(Q-1) are orthogonal. Channel k also has its own random channel
   hypervector C_k. The record of one sample is
   R = maj(C_1⊗S_v1, C_2⊗S_v2, C_3⊗S_v3, C_4⊗S_v4, F), where F is the tie
   breaker described below.
2. **Temporal encoder.** It binds the current record with the two before it:
   trigram[t] = R[t] ⊗ ρ(R[t-1]) ⊗ ρ²(R[t-2]). In inference each trigram is a
   query. In training, the trigrams of a run are bundled into one prototype,
   and the prototype is handed on at the end of the run.
3. **Associative memory.** It stores one prototype per class. For a query it
   returns the class with the smallest Hamming distance, together with that
   distance.

## The manipulator (`hd_man`)

The manipulator is the central building block. Its input is a hypervector
`hv_i` plus a few *manipulator* bits `manip_i`, one per row of a constant
ROWS × D connectivity matrix. It computes:

```
hv_o[n] = hv_i[n] XOR ( OR over rows m of (manip_i[m] AND matrix[m][n]) )
```

When row m is active, the output is the input with row m's bit positions
flipped. The more 1s a row has, the less the output resembles the input: D/2
flips produce an orthogonal vector, and a few flips produce a similar one. A
column with a single 1 reduces to one XOR gate, and an empty column is a wire.
No memory is involved.

The design uses the manipulator three times, with three matrix kinds:

| use | rows | matrix rule | driven by |
|---|---|---|---|
| replaces the continuous item memory (CIM) | Q-1 = 20 | D/2 distinct bit positions split into Q-1 groups of (D/2)/(Q-1) ≈ 205; row m owns group m; at most one 1 per column | s-hot code of the value |
| replaces the item memory (IM) of channel vectors | NC = 4 | every cell 1 with probability 1/2; row k *is* C_(k+1) | 1-hot channel register |
| back-to-back bundling | 256 | cell (m,n) is 1 with probability 1/m; row 1 all ones | 1-hot step register |

**CIM.** S_0 is a hardwired constant, a seed of tied-high and tied-low bits.
`hd_shot_lut` turns value v into v ones (a thermometer code). S_v is S_0 with
the first v groups flipped. Therefore d(S_a, S_b) = |a-b|·(D/2)/(Q-1) up to
rounding, and S_20 differs from S_0 in exactly D/2 bits.

**IM.** Flipping S_v wherever row k holds a 1 gives exactly S_v XOR C_k. The
binding therefore happens inside the manipulator, and C_k exists only as wiring.

**Where the matrices come from.** The method fixes how many 1s each row has,
not where they are. Here every matrix and seed vector is a pure function
evaluated at elaboration time (`hd_pkg::conn_column`, `hd_pkg::seed_bit`). Both
are built on a 32-bit integer hash:

- Seed bit n is the parity of `hd_hash(seed, n, const)`.
- An IM cell (m,n) is bit 16 of `hd_hash(SEED_IM, m, n)`.
- A B2B cell (m,n) is 1 when `hd_hash(SEED_B2B, m-1, n) mod m == 0`.
- A CIM column takes its position p = `perm_index(n)` from a keyed bijection of
  [0, D). The column is connected to row ⌊p·(Q-1)/(D/2)⌋ if p < D/2, and to no
  row otherwise.

Change the `SEED_*` constants in `hd_pkg` to get another, equally valid, set of
patterns. Testbenches use the same functions, so they follow the change
automatically.

## Spatial encoders

`hd_spatial_man` (the default) handles one channel per cycle:

```
values ─► channel mux ─► s-hot LUT ─► MAN(CIM, seed S0) ─► MAN(IM, 1-hot channel) ─┬─► mux ─► saturating counters ─► record
                                                                                    └─► XOR-feedback register (F) ─┘
```

**Saturating counters** (`hd_sat_counter_block`). A bundle of many votes is
counted per bit. Each bit has a 3-bit two's-complement counter that counts +1
for a 1 and -1 for a 0. It saturates at -4 and +3 instead of wrapping. The
bundled bit is 1 when the counter is positive. The first vote of a record
reloads the counter, so no clear cycle is needed.

**Additional feature F.** A majority of four votes can tie. Breaking ties at
random would make equal inputs give different records. Instead, a fifth vote is
derived from the data itself: F is the first bound vector XOR the last one.
It is collected in a register over the channel cycles and voted in one extra
cycle. Five votes never tie, and 3-bit counters cannot saturate wrongly with
only five votes. More channels need wider counters. With 8 channels there are
9 votes: five 1s followed by four 0s would leave a 3-bit counter at -1, so
`CNT_W` must be 4.

**Timing.** One sample takes NC + 3 = 7 cycles: accept, four channel votes, the
F vote, and the move into the output register. The encoder takes a new sample
only when idle.

`hd_spatial_ca` is the same encoder, except that C_k comes from a D-cell rule-30
cellular automaton (`hd_cellular_automaton`):

- next[i] = cell[i+1] XOR (cell[i] OR cell[i-1]), with cyclic ends.
- The automaton is reloaded with the seed C_1 whenever a sample is accepted, and
  it steps once per channel.

Its memory cost does not grow with the number of channels. Successive states are
pairwise orthogonal; the testbench checks this for 40 steps.

## Temporal encoder and back-to-back bundling

**Trigrams** (`hd_ngram`). The window stores records that have already been
rotated. On each accepted record w0 ← ρ(R[t]) and w1 ← ρ(w0), and the trigram
R[t] ⊕ w0 ⊕ w1 is formed combinationally in the same cycle. This gives one
trigram per record. A fill count marks trigrams valid only once two earlier
records of the same sequence exist; `seq_start` resets that count.

**Back-to-back bundling** (`hd_b2b_bundler`) is the least obvious part. The goal
is a prototype close to the majority of k trigrams without k-valued counters.
For the i-th trigram T of a run:

```
M      = MAN_B2B(bundle, row i)        -- bundle with the bits of row i flipped
bundle ← maj(T, bundle, M)
```

At a position where row i has no 1, bundle and M agree, so the bundle keeps its
bit. At a position where row i has a 1, bundle and M disagree, so T decides the
bit. Row i has about D/i ones, so the i-th vote overwrites a fraction 1/i of the
bits, chosen independently per row. After i votes, each earlier vote j survives
in a given bit with probability (1/j)·∏(1-1/l) = 1/i. Every vote therefore ends
up equally represented, which is what the majority would give. The cost is a
smaller capacity: about 10-15 orthogonal vectors can be bundled, against 60-70
for an exact majority. Trigrams of one gesture are similar to each other, so
this capacity is enough.

Row 1 is all ones, so the first trigram of a run is copied in whole. A 1-hot
register walks the 256 rows. Runs longer than 256 trigrams keep using row 256,
which gives a weight of about 1/256 per further vote.

**Training protocol** (`hd_temporal_b2b`):

- A training run is a sequence of samples with `train = 1` and the class in
  `label`.
- `seq_start` is set on the first sample of the run and `last` on the final one.
- Every valid trigram of the run is bundled.
- After the `last` sample, the prototype goes to the associative memory with
  its label.
- The next run starts a fresh bundle.
- In inference (`train = 0`), every valid trigram is sent on as a query.
- The stage accepts one record per cycle whenever its output register is free.

## Associative memories and the adder tree

`hd_adder_tree` computes the popcount of a D-bit vector:

- The input is zero-padded to a power of two, P = 2^L.
- Stage s has P/2^s adders that are s bits wide.
- For D = 8192 this is 13 stages and 16,369 one-bit-adder equivalents.

The tree is purely combinational. The longest path is a ripple through all 13
stages, so a high clock rate would need pipeline registers near the root, which
this design does not add.

**`hd_am_vs`** (vector-sequential, the default) shares one tree across all
classes:

- The prototypes sit in a circular chain of NCLS registers. At rest, the last
  register holds class 0, the one before it class 1, and so on.
- Every operation rotates the chain exactly NCLS times. In step j, class j is in
  the last register, and the chain ends where it started.
- A query compares class j in step j. A comparator with feedback keeps the
  smallest distance; on a tie the lower class wins. The result appears NCLS + 1
  = 6 cycles after the query is accepted.
- A training write uses the same rotation: in the step of the target class, the
  input multiplexer takes the new prototype instead of the one leaving the
  chain.

**`hd_am_cmb`** (combinational) has one tree per class. The registered query is
compared with all prototypes at once, and the result is valid one cycle after
acceptance. It accepts one hypervector per cycle. A training write loads the
register of its class directly.

Both memories clear their prototypes to zero at reset. Both return
`out_label_o` and `out_dist_o`.

## Top level (`hd_top`)

| port | dir | meaning |
|---|---|---|
| `clk_i`, `rst_ni` | in | clock; asynchronous active-low reset |
| `in_valid_i`, `in_ready_o` | in/out | sample handshake |
| `in_values_i[NC][VAL_W]` | in | quantized channel values 0..Q-1; filtering, envelope and quantization happen outside |
| `in_ctrl_i` | in | `hd_ctrl_t {train, seq_start, last, label[7:0]}` |
| `out_valid_o`, `out_ready_i` | out/in | result handshake (inference only) |
| `out_label_o[7:0]`, `out_dist_o[DIST_W]` | out | predicted class and its Hamming distance |

| parameter | default | meaning |
|---|---|---|
| `D` | 8192 | hypervector dimension |
| `NC` | 4 | channels |
| `NCLS` | 5 | classes |
| `Q` | 21 | quantization levels |
| `N` | 3 | N-gram size |
| `CNT_W` | 3 | width of the spatial bundling counters |
| `B2B_ROWS` | 256 | maximum number of bundle steps with distinct weights |
| `SPATIAL` | `SPATIAL_MAN` | `SPATIAL_CA` selects the cellular-automaton encoder |
| `AM` | `AM_VS` | `AM_CMB` selects the single-cycle memory |

The defaults are the reference EMG configuration. The default module choice,
manipulator + back-to-back + vector-sequential, is the smallest of the
Pareto-optimal combinations. The publication reports 18,340 CLBs on a Virtex
UltraScale for it.

In this RTL the spatial encoder sets the pace: a classification is produced
every 7 cycles. Results appear only from the third sample of a sequence onward,
once a trigram exists.

The publication's baseline modules are not included: the LUT-based parallel
spatial encoder, the counter-based temporal bundler and the bit-sequential
memory.

## Departures and filled-in details

- **s-hot code width.** The code has Q-1 bits, with value 0 meaning no bits
  set. This matches the connectivity-matrix example for q = 8, which has 7
  rows, and the (D/2)/(Q-1) bits-per-row rule. One sentence of the publication
  speaks of a "q × q" table.
- **Random patterns.** All random patterns come from a hash function, as
  described above. The publication's exact matrices are not known.
- **Additional feature.** F is the binding of the first and last channel, as in
  the publication's figures. It is used only for an even channel count. The
  remaining tie rule is: a counter at 0 gives 0.
- **Cellular automaton.** Left is taken as the higher index, and the ends wrap
  around. The publication only names rule 30 with a neighbourhood of three.
- **Handshakes.** The publication says the modules synchronize by handshakes but
  does not give the protocol. Valid/ready with single output registers is used,
  and the cycle counts above follow from it.
- **Training control.** The `seq_start` and `last` framing, the N-gram fill
  count, and starting a fresh bundle per run (rather than updating a stored
  prototype) are this design's own.
- **VS write mechanism.** Writing a prototype by rotating the chain, and
  resetting prototypes to zero, are this design's own.
- **Tie rule.** On equal distances the lowest class wins.
- **Adder tree.** The tree has no pipeline registers.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench compares
against a bit-level reference model, `tb/hd_ref_pkg.sv`, written independently
of the RTL structure. For example, the B2B reference says "take the new vote
where row i has a 1" instead of using a majority gate. Every testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | covers |
|---|---|
| `tb_hd_man` | matrix counting rules, OR-XOR function for all three kinds |
| `tb_hd_shot_lut` | all input values |
| `tb_hd_cellular_automaton` | rule-30 steps, reload, pairwise orthogonality |
| `tb_hd_sat_counter_block` | saturation at both ends, bundle restarts |
| `tb_hd_spatial_man`, `tb_hd_spatial_ca` | records vs exact majority, 7-cycle rate and latency, back-pressure |
| `tb_hd_ngram` | trigrams, sequence restarts, stalls |
| `tb_hd_b2b_bundler` | update rule, last-row reuse, capacity (10 vectors at D = 4096) |
| `tb_hd_temporal_b2b` | queries and prototypes, one record per cycle, back-pressure |
| `tb_hd_adder_tree` | D = 64, 100, 8192 |
| `tb_hd_am_vs`, `tb_hd_am_cmb` | label and distance, ties, latency NCLS+1 and 1 |
| `tb_hd_top`, `tb_hd_top_ca_cmb` | both configurations end to end at D = 256, 16 B2B rows |
| `tb_hd_top_scale` | 8 channels, 12 classes, 4-bit bundling counters at D = 512 |
| `tb_hd_top_full` | all defaults (D = 8192, 256 rows), 260-sample training runs per class, then queries |

The end-to-end tests train five synthetic gestures, each with a base value per
channel plus ±2 levels of noise, and then query them. Every result must match
the reference model's label and distance exactly. The tests also require at
least 80 % of results to name the class the query came from; every run so far
reached 100 %. They count each mechanism and fail if one never occurs:
prototype writes, stalls, output back-pressure, sequence restarts, and reuse of
the last B2B row.

To simulate with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hd_pkg.sv tb/hd_ref_pkg.sv tb/tb_hd_top.sv --top-module tb_hd_top
./obj_dir/Vtb_hd_top
```

Other modules are found through `-Irtl`. Swap in any testbench name.

The full-size testbench takes about two minutes to build and run together.
Most of the build time goes into evaluating the 256 × 8192 B2B matrix at
elaboration.

## Files

- `rtl/hd_pkg.sv`: shared types (`hd_ctrl_t`, module-kind enums), seeds,
  pattern functions.
- `rtl/hd_man.sv`, `rtl/hd_shot_lut.sv`, `rtl/hd_cellular_automaton.sv`,
  `rtl/hd_sat_counter_block.sv`: building blocks.
- `rtl/hd_spatial_man.sv`, `rtl/hd_spatial_ca.sv`: spatial encoders.
- `rtl/hd_ngram.sv`, `rtl/hd_b2b_bundler.sv`, `rtl/hd_temporal_b2b.sv`:
  temporal encoder.
- `rtl/hd_adder_tree.sv`, `rtl/hd_am_vs.sv`, `rtl/hd_am_cmb.sv`: associative
  memories.
- `rtl/hd_top.sv`: the classifier.
- `tb/`: reference package and testbenches.
