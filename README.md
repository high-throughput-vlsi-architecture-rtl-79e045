# A code-agnostic GRANDAB decoder in SystemVerilog

Guessing Random Additive Noise Decoding (GRAND) decodes a binary linear code
without using anything about the code except its parity-check matrix **H**.
Instead of locating errors algebraically, it guesses the noise: it tries error
patterns `e` in order of increasing Hamming weight and stops at the first one
for which `r ^ e` is a codeword, i.e. `H·(r ^ e)ᵀ = 0`. GRAND with
abandonment (GRANDAB) gives up after all patterns up to a weight `AB` have
failed. With code length 128 and `AB = 3` that is up to
C(128,1) + C(128,2) + C(128,3) = 349 632 codebook queries per word.

This RTL implements a decoder for that search which performs **N queries per
clock cycle** and finishes the whole search in at most

    2 + Σ_{i=2..N} ⌊i/2⌋  cycles      (4098 for N = 128)

It decodes any linear code of length up to `N = 128` with up to `SW = 32`
parity checks (rate ≥ 0.75 at length 128). The code is changed by loading a
new H; nothing in the logic depends on the code. The design follows the
architecture of "High-Throughput VLSI Architecture for GRAND" (Abbas,
Tonnellier, Ercan, Gross). The sections below describe how it works and
where this RTL adds its own choices to what that paper specifies.

## Why N queries fit in one cycle

The syndrome is linear. Write `s_i` for column `i` of H, which is also the
syndrome of a single flip at position `i`. Then

    H·(r ^ 1_i ^ 1_j ^ 1_k)ᵀ = H·rᵀ ^ s_i ^ s_j ^ s_k

So every query is an XOR of the received word's syndrome with one, two or
three columns of H. The decoder computes `H·rᵀ` once. It keeps the columns of
H in two rotating register files, the **dials**. Row `t` of the datapath
tests `H·rᵀ ^ s_ctrl ^ dial1[t] ^ dial2[t]`, and all N rows run in parallel.
`s_ctrl` is a third column supplied by the controller. Only the contents of
the dials change from cycle to cycle.

## The dials

A dial is an N-row register file of `SW`-bit syndromes (`rtl/dial.sv`). Its
first `len` rows are *active*; the rows below them hold the null (all-zero)
vector. It supports these operations, one per clock edge:

| operation  | effect on the active rows `a_0 … a_{len-1}` |
|------------|---------------------------------------------|
| `ROT`      | cyclic shift up: `a_1 … a_{len-1}, a_0` |
| `SHIFT_UP` | like `ROT`, but `a_0` is replaced by the null vector and `len` drops by one; later rotations skip the null rows |
| `LOAD k,ρ` | reset to `s_k … s_{N-1}` (`len = N-k`), then rotate once if `ρ = 1` |
| `CLEAR`    | every row null, `len = N` |

Each dial has an **index dial** (`rtl/index_dial.sv`). It is the same
structure with `log2(N)`-bit rows whose reset content is `0, 1, …, N-1`. It
receives the same control word as its dial, so row `t` of an index dial
always says which column of H sits in row `t` of the dial.

## The schedule

Positions are numbered from 0 in this RTL. One time step is one clock cycle.

| step(s) | dial 1 | dial 2 | controller | patterns per step |
|---------|--------|--------|------------|-------------------|
| 1 (weight 0) | null | null | 0 | `r` itself |
| 2 (weight 1) | `s_0 … s_{N-1}` | null | 0 | all N single flips |
| 3 … 2+⌊N/2⌋ (weight 2) | `s_0 … s_{N-1}` | dial 1 rotated by `d = 1 … ⌊N/2⌋` | 0 | pairs at cyclic distance `d` |
| then (weight 3), for `j = 0 … N-3` | `s_{j+1} … s_{N-1}`, nulls | same list rotated by `d = 1 … ⌊m/2⌋` | `s_j`, index `j` | triples `{j, p, q}`, `p, q > j` |

Here `m = N-1-j` is the number of active rows for first flip `j`.

* **Pairs.** Rotating dial 2 by `d` against dial 1 pairs each position with
  the one `d` places further round the circle. Distances `1 … ⌊N/2⌋` cover
  every unordered pair. For even `N` the last distance lists each pair twice;
  that costs nothing, because the step happens anyway.
* **Triples.** Three dials would produce duplicate triples. Instead the
  controller fixes the smallest position `j` and the two dials enumerate the
  pairs among the positions above `j`, exactly as in the weight-2 phase but
  on `m` rows. When `j` advances, dial 1 is shifted up once, dropping
  `s_{j+1}`. Dial 2 is reloaded, shifted up by `j+2` and rotated by one, all
  in a single edge (`LOAD j+2,1`).
* **Null rows.** Below row `m` both dials hold null vectors. The test there
  is `H·rᵀ ^ s_j`, a single-flip query already answered "no" in step 2, so
  those rows cannot match and need no mask.

The step counts add up to `1 + 1 + ⌊N/2⌋ + Σ_{m=2..N-1} ⌊m/2⌋`, the formula
above. The controller (`rtl/grand_controller.sv`) is a phase register (`W0`,
`W1`, `W2`, `W3`) plus two counters, `t` (rotation within the current
phase or `j`) and `j`. It issues the dial control words, and it also holds H.

With the parameter `AB = 2` the search ends after the weight-2 phase. That
takes at most `2 + ⌊N/2⌋` cycles, e.g. 41 cycles for `N = 79`.

## From a matching row to the decoded word

`rtl/query_array.sv` forms the N test syndromes and NOR-reduces each of them
to a match bit. It uses one XOR for `H·rᵀ ^ s_ctrl`, then 2N XORs with the
dial rows.

`rtl/priority_encoder.sv` picks the lowest matching row. Any matching row of
the current step gives an error pattern of the minimum weight, so the choice
among them is arbitrary.

Two N:1 muxes (`rtl/index_mux.sv`) read the selected row of each index dial.

`rtl/word_generator.sv` flips those positions of `r`: `idx1` for weight 1,
`idx1` and `idx2` for weight 2, and also the controller's `j` for weight 3.
The search stops in the first step with a match.

`rtl/syndrome_calc.sv` computes `H·rᵀ` combinationally as the XOR of the
columns selected by `r`. A word that is already a codeword is therefore
recognised in step 1.

## Interface and timing (`rtl/grand_top.sv`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `h_load`, `h_in[N]` | in | 1, `SW`×N | load H; `h_in[i]` is column `i`, bit `b` is parity check `b`; rows past `n-k` must be 0 |
| `in_valid`, `in_ready`, `r_in` | in/out/in | 1, 1, N | received hard decisions, accepted when `in_valid && in_ready` |
| `out_valid` | out | 1 | one-cycle pulse per decoded word, in input order |
| `out_x` | out | N | codeword estimate `r ^ e` (equal to `r` on failure) |
| `out_fail` | out | 1 | no pattern of weight ≤ AB matched (abandoned) |
| `out_weight`, `out_steps` | out | 2, 16 | weight of `e` (`AB` on failure); time steps the decode took |

* A word accepted at clock edge `E` is tested from the next cycle on. Its
  result appears at edge `E + steps + 1`.
* `in_ready` is high when the decoder is idle, and also in the last step of
  a decode. Error-free words are therefore decoded at one word per cycle,
  which is the rate behind the high average throughput at good SNR.
* At high SNR almost every word takes 1 step. The worst case is 4098 steps.
* H may be loaded only between decodes. `in_ready` is low during `h_load`,
  and an assertion checks the rule.
* Reset (`rst_n`, asynchronous, active low) empties the dials and clears H.

A code shorter than `N` runs on the full-size decoder with the extra columns
of H set to zero, and the extra bits of `r` set to zero. A zero column only
repeats queries already made, so it never causes a false match.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N`  | 128 | code length (4 … 256) |
| `SW` | 32  | syndrome width, the largest `n-k` supported |
| `AB` | 3   | abandonment weight, 2 or 3 |

The defaults are the configuration evaluated in the paper: 128-bit codes of
rate 0.75 to 0.94 and `AB = 3`. The paper reports 0.25 mm² and 500 MHz in
65 nm CMOS for that configuration. `N = 79, SW = 15, AB = 2` is the
configuration of its comparison with a dedicated (79,64) BCH decoder.

## Where this RTL goes beyond the paper

The datapath and the schedule are the paper's. The paper leaves out control
signals and interfaces; the following are this design's own choices:

* **Handshake and registers.** The valid/ready handshake, the input word
  register and the output register are this design's, as are the `fail`,
  `weight` and `steps` outputs. So is accepting the next word in the last
  step of the current one.
* **Dial operations.** The dial's `LOAD k,ρ` (reset plus shift-up plus
  rotate in one edge) is implemented as a mux from the stored columns of H.
  The explicit active-row counter `len` and the `CLEAR` operation are also
  this design's.
* **Index numbering.** Positions are 0-based, so `log2(N)` bits suffice,
  as the paper's index-dial width requires.
* **Output.** The decoder outputs the codeword estimate. Mapping it to
  message bits (`u = c·G⁻¹`) is left outside. For systematic codes, such as
  the CRC codes below, that mapping is just a selection of bits.
* **Encoder priority.** The lowest matching row wins.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…`.

* `tb_grand_top` runs at the default size. It loads, in turn, the four CRC
  codes of length 128 with generators `0x04C11DB7`, `0xB2B117`, `0x1021` and
  `0xD5` (k = 96, 104, 112, 120). Column `i` of H is `xⁱ mod g(x)`.
* For each code it decodes codewords with 0–3 random flips, plus heavily
  corrupted words that end in abandonment. Words are sent back to back.
* An independent model walks the same list of patterns in software. Every
  output is checked against it: the word, the fail flag, the weight, the
  step count, and the cycle latency.
* The test also requires that decodes end in each of the four phases, that
  abandonment (4098 cycles) occurs, that back-to-back acceptance occurs, and
  that H is reloaded.
* During every decode the test reads the index dials and the controller's
  index in each step. A search that ends in abandonment must have tested
  all 349 632 distinct patterns of weight 1 to 3, in 4098 cycles.
* `tb_grand_top_bch79` runs the `N = 79, AB = 2` configuration on a
  shortened, extended double-error-correcting BCH code. It uses 15 checks;
  column `i` is `[αⁱ; α³ⁱ; 1]` in GF(2⁷) with `x⁷+x³+1`. Weight 0–2 errors
  must be corrected, and every weight-3 error must be abandoned after
  exactly 41 cycles.
* `tb_grand_controller` compares every control word of a full 4098-step
  search with the schedule above. It also checks early stops and the
  41-step `AB = 2` case.
* `tb_dial` replays the dial layouts of the paper's dial figures and random
  operation sequences against a queue model. The other testbenches check
  the combinational blocks against bitwise reference models.

To simulate with Verilator (the package first):

    verilator --binary --timing --assert -Irtl rtl/grand_pkg.sv \
        $(ls rtl/*.sv | grep -v grand_pkg) tb/tb_grand_top.sv \
        --top-module tb_grand_top
    ./obj_dir/Vtb_grand_top

The full-size end-to-end test takes well under a second. Lint produces a
few style warnings, such as `SYNCASYNCNET`. It comes from the concurrent
assertions using the asynchronous reset as their disable condition.
