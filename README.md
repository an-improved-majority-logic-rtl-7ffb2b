# A fully parallel majority-logic decoder for Reed–Muller codes

This is a decoder for the binary Reed–Muller code RM(r,m), built as a single block of combinational logic. It corrects every bit of the received word at once, information and redundancy alike, through a fixed depth of gates. There is no clock, no register and no iteration. The default build is RM(2,5): 32-bit words, 16 message bits, minimum distance 8, and up to three bit errors corrected. Parameters `R` and `M` select any other code with m ≥ 3 and 1 ≤ r ≤ m/2.

The design targets safety- and time-critical embedded systems. There, what matters is the time from word-in to word-out, not the number of operations. Recursive Reed–Muller decoders use fewer operations but must run them one after another. Majority-logic decoders can run everything at the same time. This decoder follows the improved two-step majority-logic algorithm of Bertram, Hauck and Huber (IEEE Trans. Commun., 2013). For a code of length n and distance δ it uses O(δ²) functions. Chen's classic two-step decoder needs O(nδ²).

## The idea in a few lines

Number the n = 2^m positions by the vectors of Z₂^m. Position p is the vector whose binary value is p. A *d-flat* is a coset of a d-dimensional subspace. Two facts drive the decoder:

* **Check-sums of large flats see only the error.** An (r+1)-flat is a codeword of the dual code, so the XOR of the received bits over it equals the XOR of the error bits over it.
* **Majority over flats that meet in a common set.** Take a set S and δ−2 or more supersets of S that pairwise meet exactly in S. With at most δ/2−1 errors, S holds an odd number of errors exactly when more than half of the supersets do.

Chen's decoder applies the second fact twice. It computes check-sums of nδ² (r+1)-flats, votes them down to r-flats, then votes the r-flats down to single positions.

This decoder never forms an (r+1)-flat. It picks δ−2 subspaces U_0 … U_{δ−3} of dimension r that pairwise meet only in {0}. Each U_l cuts the n positions into δ disjoint cosets (the *r-flats* of U_l), each of 2^r positions. Every position lies in exactly one flat of each U_l, so in δ−2 flats altogether, and any two of these meet only in that position. For subspace l:

1. **Check-sums.** For each of its δ flats, XOR the 2^r received bits to get ς_{l,i}.
2. **Majority.** μ_l = majority(ς_{l,0} … ς_{l,δ−1}).
3. **Correction of the check-sums.** ς̄_{l,i} = ς_{l,i} ⊕ μ_l.

The union of two flats i and j of the same U_l is an (r+1)-flat. Its check-sum ς_{l,i} ⊕ ς_{l,j} therefore shows only errors. So "flat i is odd" is the same as "ς_{l,i} differs from most of the other ς_{l,j}", which is what step 3 computes. With a correctable error pattern the δ check-sums of a subspace never split exactly half and half, so step 2 never sees a tie. The testbench checks this on every decode.

After step 3, ς̄_{l,i} = 1 exactly when flat i of U_l holds an odd number of errors. The last two steps run for every position j:

4. **Per-position vote.** η_j = majority of the δ−2 flags ς̄_{l,·} of the flats that contain j, one flag per subspace.
5. **Correction.** c_j = z_j ⊕ η_j.

For RM(2,5) the decoder uses 48 four-input parity generators, six 8-input majority gates, 48 + 32 XOR gates and 32 six-input majority gates.

## Geometry and wiring: what the tables mean

All the geometry ends up as wiring. For each subspace, a permutation ψ_l lists the n positions *in flat order*. Slots i·2^r … i·2^r+2^r−1 hold the positions of flat i. The hardware uses ψ_l twice:

* **ω_l (forward).** Slot j of parity-majority module l is driven by received bit z_{ψ_l(j)}. The module then only has to XOR consecutive groups of 2^r bits.
* **ω_l⁻¹ (backward).** Module l produces one flag per flat. Each flag is fanned out to the 2^r slots of its flat, and slot j is delivered to position ψ_l(j). Every position then receives exactly one flag from every module.

Both are pure wiring with no gates. In `rm_decoder` they are generate loops of `assign` statements indexed by a constant table. They are not separate modules.

**RM(2,5) (the default).** The six subspaces and their wiring are the published ones. `rm_pkg::PSI_RM25` holds ψ_0 … ψ_5 exactly as tabulated in the paper. For example, U_0 = {0, 1, 30, 31}, and its eight flats in order are {0,1,30,31}, {2,3,28,29}, {8,9,22,23}, {10,11,20,21}, {14,15,16,17}, {12,13,18,19}, {6,7,24,25} and {4,5,26,27}. The table was checked three ways: each row is a permutation of 0…31, it agrees with the paper's position-to-flat maps φ_l, and it agrees with the flats v + U_l that the paper lists.

**Other codes (this design's own construction).** The paper does not give the subspaces for other codes; it only refers to the finite-geometry literature for how to build them. `rm_pkg::psi_gen` uses a simple construction instead. Let k = m−r ≥ r, and write a position as (y, x), where x is its low r bits and y its high k bits. Then, over GF(2^k), define

    U_l = { (l·x, x) : x ∈ Z₂^r },   l = 0 … δ−3   (l·x a product in GF(2^k))

Two such subspaces meet only in 0 because the field has no zero divisors, and there are 2^k = δ of them to choose from. The flat of U_l that contains (y, x) has index y ⊕ l·x. So flat f of U_l holds the positions ((f ⊕ l·q) << r) | q for q = 0 … 2^r−1. The primitive polynomials used for GF(2^k) cover k ≤ 16.

Any set of subspaces with the pairwise-trivial-intersection property gives a correct decoder with the same gate counts. Only the wiring differs.

## Hardware structure

| Level | Function | Where | RM(2,5) count |
|---|---|---|---|
| 1 | check-sum (XOR of 2^r bits) | `rm_parity_gen`, inside `rm_parity_majority` | 48 × 4 inputs |
| 2 | majority of δ check-sums → μ_l | `rm_majority` (WIDTH = δ), inside `rm_parity_majority` | 6 × 8 inputs |
| 3 | ς̄ = ς ⊕ μ_l | XOR row in `rm_parity_majority` | 48 |
| 4 | majority of δ−2 flags → η_j | `rm_majority` (WIDTH = δ−2) in `rm_decoder` | 32 × 6 inputs |
| 5 | c = z ⊕ η | XOR row in `rm_decoder` | 32 |

In general there are δ(δ−2) check-sums of n/δ = 2^r inputs, δ−2 majorities of δ inputs, n majorities of δ−2 inputs, and n + δ(δ−2) two-input XORs. These counts, and the paper's numbers for RM(2,4), RM(2,5), RM(3,6) and RM(3,7), are checked in `tb/tb_rm_codes.sv`:

| Code | n | t | check-sums | majorities (δ in) | majorities (δ−2 in) | XOR |
|---|---|---|---|---|---|---|
| RM(2,4) | 16 | 1 | 8 × 4 | 2 × 4 | 16 × 2 | 24 |
| RM(2,5) | 32 | 3 | 48 × 4 | 6 × 8 | 32 × 6 | 80 |
| RM(3,6) | 64 | 3 | 48 × 8 | 6 × 8 | 64 × 6 | 112 |
| RM(3,7) | 128 | 7 | 224 × 8 | 14 × 16 | 128 × 14 | 352 |

### Files

| File | Contents |
|---|---|
| `rtl/rm_pkg.sv` | The RM(2,5) wiring table, GF(2^k) multiply, and the wiring functions `psi_gen` / `psi` |
| `rtl/rm_parity_gen.sv` | Even parity generator (XOR reduction) |
| `rtl/rm_majority.sv` | Majority gate: population count ≥ ⌊s/2⌋+1 |
| `rtl/rm_parity_majority.sv` | Parity-majority module: levels 1–3 for one subspace |
| `rtl/rm_decoder.sv` | Top level: wiring, δ−2 parity-majority modules, per-position majorities, output XORs |
| `tb/tb_rm_parity_gen.sv`, `tb/tb_rm_majority.sv`, `tb/tb_rm_parity_majority.sv` | Unit testbenches |
| `tb/tb_rm_decoder.sv` | End-to-end test at the default RM(2,5) |
| `tb/tb_rm_codes.sv` + `tb/rm_code_check.sv` | RM(1,3), RM(2,4), RM(2,5), RM(3,6) and RM(3,7), plus gate-count checks |

## Interface and timing

```systemverilog
rm_decoder #(.R(2), .M(5)) u_dec (
  .z_i(received),   // [2**M-1:0], bit j = position j
  .c_o(corrected)   // [2**M-1:0]
);
```

Bit j of each vector is the position whose m-bit binary value is j. For RM(2,5) this matches the generator matrix with rows 1, v4 … v0 and the ten products v_a·v_b (see the testbench encoder). Any encoder that produces RM(r,m) codewords in this position order works; the decoder does not look at how the message was mapped.

The output is valid one combinational path after the input changes. There is no handshake and no latency in cycles. The logic depth is one parity tree of ⌈log₂ 2^r⌉ XOR levels, two majority gates and two XOR levels. To use the decoder in a clocked design, put registers around it; a pipeline register after level 3 (on the n·(δ−2) flag wires) is a natural cut.

With more than δ/2−1 errors the output is whatever the network produces. There is no "uncorrectable" flag.

## Departures from the paper and choices made here

* **Majority and parity gates are digital.** For its size/depth analysis, the paper treats a majority gate as a single linear threshold gate. It also discusses constant-depth threshold-gate circuits for parity. Here majority is a population count compared with a threshold, and parity is an XOR tree. The function is the same; depth and size in standard cells differ from the analysis.
* **Tie handling.** An even-width majority outputs 0 on an exact tie, following the definition "more than ⌊s/2⌋ ones". For correctable patterns, the 8-input majority never sees a tie. The 6-input one can, and there a tie correctly means "no error".
* **Subspaces for codes other than RM(2,5)** come from the GF(2^k) construction above, not from the paper.
* **Parameter guard.** Elaboration stops with `$error` outside m ≥ 3, 1 ≤ r ≤ m/2, m−r ≤ 16.
* Two typos in the paper's RM(2,5) example do not affect the RTL: "U_0, U_2, …, U_5" means U_0 … U_5, and "ς_{1,7}" in the module figure's caption means ς_{l,7}.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line:

* **`tb_rm_parity_gen`, `tb_rm_majority`:** all input patterns at the sizes used (4-input parity; 8- and 6-input majority). They also check the tie rule.
* **`tb_rm_parity_majority`:** replays the paper's worked example for all six subspaces. The input flats are built from the listed U_l and coset leaders, not from ψ, and the outputs are compared with the printed ς̄ rows. Then 20,000 random inputs are checked against a reference model.
* **`tb_rm_decoder`** (default parameters):
  * Checks the worked example end to end: message → codeword, received word with errors at 0, 1 and 31 → corrected word, plus the internal ς̄, μ and votes the example prints.
  * Runs all 5,489 error patterns of weight ≤ 3 on 64 codewords.
  * Decodes every one of the 65,536 codewords clean and with 1–3 random errors.
  * Checks the no-tie property on every decode, and counts error weights, μ = 0/1 and corrected bits.
* **`tb_rm_codes`:** 66k random decodes across RM(1,3) … RM(3,7) at full correctable weight, plus the gate counts above.

Run one with plain Verilator from the project root, for example:

    verilator --binary --timing -y rtl -y tb rtl/rm_pkg.sv tb/tb_rm_decoder.sv --top-module tb_rm_decoder
    ./obj_dir/Vtb_rm_decoder

Each testbench finishes in well under a second.

## Changing it

* **Another code:** set `R` and `M`. Ports grow to 2^M bits, and the wiring is generated at elaboration.
* **Another set of subspaces:** replace `psi()` in `rm_pkg`. Any table where, for each l, the groups of 2^r consecutive entries are the cosets of an r-dimensional subspace U_l works, as long as the U_l pairwise meet only in 0.
* **Faster parity for large 2^r:** swap the body of `rm_parity_gen`; nothing else depends on how it is built.
