# A column-serial systematic encoder for Hermitian codes

A Hermitian code over GF(q²) has length n = q³. Its coordinates are the affine
points of the curve x^(q+1) = y^q + y. Encoding it systematically by
multiplying with a generator matrix costs O(q⁵) multipliers. The encoder here
uses a structural fact instead. Write the codeword as a q × q² array, with one
column per x-coordinate α and one row per "fibre" label β. Multiply every
column by a fixed, invertible q × q matrix. Each row of the result must then
be a codeword of its own small Reed–Solomon-like code, and the rows have
different rates. So the encoder is built from q RS-style LFSR encoders, one per
row, and a small linear-algebra engine that works on one column at a time. The
engine picks the check symbols of the column so that the transformed column
agrees with what the row encoders require. Every part is O(q) or O(q²) in
multipliers and registers.

The algorithm is the one published by R. Agarwal, R. Koetter and E. M. Popovici,
"A Low Complexity Algorithm and Architecture for Systematic Encoding of
Hermitian Codes". That paper gives the mathematics and a block diagram with four
modules (A, B, C, D) and two adders. It specifies what each module does but not
how it is built inside. This RTL fills in those insides, the control and the
interface. The section "Departures and choices" lists where it had to decide
something itself.

## 1. The code as an array

Default configuration (all set in `rtl/herm_pkg.sv`):

| quantity | value |
|---|---|
| q | 4 |
| symbol field GF(q²) | GF(16), modulus x⁴ + x + 1, primitive element ε = x |
| subfield primitive γ | ε^(q+1) = ε⁵ |
| y0 (any element with y0^q + y0 = 1) | ε (0x2) |
| designed pole order m | 30 |
| length n = q³, genus g = q(q−1)/2 | 64, 6 |
| dimension k = n − (m + 1 − g) | 39 |

Affine points are P(α, β) = (α, α^(q+1)(y0 + β) + δ(α)β). Here α ranges over
GF(q²), β ranges over GF(q), and δ(α) is 1 only for α = 0. The codeword array c
is indexed as follows:

* **Column j** (0 ≤ j < q²) is α = ε^j for j < q² − 1 and α = 0 for j = q² − 1.
* **Row r** (0 ≤ r < q) is β = 0 for r = 0 and β = γ^(r−1) otherwise.

C(m) is the dual code. The array c is a codeword when every syndrome
S_ab = Σ c(β,α) x^a y^b is zero, for all a·q + b(q+1) ≤ m with b < q.

**Information layout.** Column j carries b̂(j) information symbols, in its top
rows 0 … b̂(j)−1. The rest of the column is check symbols. For the default code:

| columns j | 0–7 | 8 | 9 | 10–11 | 12–15 |
|---|---|---|---|---|---|
| information rows b̂(j) | 4 | 3 | 2 | 1 | 0 |

Read by rows, row r holds 12, 10, 9 and 8 information symbols for r = 0…3, 39 in
total. The user supplies the information column by column. The encoder tells the
user how many symbols the next column takes (`in_n_info_o`).

## 2. Why the rows decouple

Let A be the q × q matrix with A[i][r] = (y0 + β_r)^i, and A′ the matrix with
A′[i][r] = β_r^i, taking 0⁰ = 1. Form r̃, with each column r̃_j = A_j c_j, where
A_j = A except for the last column (α = 0), which uses A′. Substituting the
points into the syndrome gives

  S_ab = Σ_{j<q²−1} ε^{j(a + b(q+1))} r̃[b][j] + [a = 0] · r̃[b][q²−1].

So the syndromes of power y^b involve only row b of r̃. Row i of r̃ must be a
codeword of the **extended row code E_i**, of length q² with
â(i) = ⌊(m − i(q+1))/q⌋. E_i has the following checks:

* Σ_{t<q²−1} r_t ξ_a^t = 0 for a = 1 … â(i), where ξ_a = ε^(a + i(q+1));
* r_{q²−1} + Σ_{t<q²−1} r_t ξ_0^t = 0 (one extra "extension" position).

Row i therefore has k_i = q² − â(i) − 1 free positions (8, 9, 10 and 12 by
default), followed by â(i) RS parity symbols and one extension symbol. The
inverses of A and A′ have closed forms (Lemma 3 of the paper). Row β of A⁻¹ is
(1 − h^(q−1), h^(q−2), …, h, 1) with h = y0 + β.

## 3. Solving one column (the core of the design)

Columns are processed left to right, j = 0 … q² − 1. When column j arrives, the
row encoders determine some of its transformed symbols. The rows whose free part
has ended (k_i ≤ j) have their r̃ symbol fixed. There are l = q − b̂(j) of them,
and they are always rows 0 … l−1. The other rows of r̃_j are still free. The
column solver must find c_j that meets two conditions at once:

* c_j has the given information in rows 0 … b̂(j)−1 and unknown check symbols
  below;
* A_j c_j equals the fixed values v_0 … v_{l−1} in rows 0 … l−1. Rows l … q−1
  are free, and whatever they come out as becomes the row encoders' next free
  (virtual information) symbol.

There are l unknowns and l equations. The solver works in five steps (Algorithm
3 of the paper). Each step maps onto a block:

| step | operation | block |
|---|---|---|
| 1 | b = A_j (x, 0) | module A: the information part alone, rows emitted serially |
| 2 | b̂ = v − b on rows < l, 0 below | upper adder, v from the row encoders (module C) |
| 3 | b̃ = systematic codeword of D_l with b̃_i = b̂_i for i < l | module D |
| 4 | c_j = (x, 0) + A_j⁻¹ b̃ | module B plus one XOR per row |
| 5 | r̃_j = b̃ + b | lower adder, written back into the row encoders |

Step 3 carries the idea. D_l is the code whose parity checks are the first
q − l rows of A_j⁻¹. If b̃ lies in D_l, then A_j⁻¹ b̃ is zero in rows
0 … q−l−1 = 0 … b̂(j)−1, so step 4 leaves the information symbols untouched. And
A_j c_j = A_j (x, 0) + b̃ = b + b̃, which on rows < l equals b + (v − b) = v. In
characteristic 2, row β of A⁻¹ b̃ = 0 reads Σ_t b̃_t x^(q−1−t) = b̃_0 at
x = y0 + β. For A′ the same holds with x = β. Define
e = (b̃_0, …, b̃_{q−2}, b̃_{q−1} + b̃_0). Then D_l is the set of e whose
polynomial is divisible by g_p(x) = Π_{s<p}(x + x_s), with p = q − l. Module D is
therefore a division LFSR of run-time-selected degree p, which adds b̃_0 back
into its last output.

Two extreme columns bracket the mixed case:

* **l = 0** (information-only columns, j < 8 by default): b̃ = 0, c_j is the
  information, and A c_j feeds the row encoders.
* **l = q** (check-only columns, j ≥ 12): c_j = A_j⁻¹ v.

## 4. Datapath and schedule

The datapath follows the paper's block diagram. Its connections are:

* A's serial output b_i goes to both adders.
* Switch b takes row encoder i's output v_i into the upper adder. The upper
  adder's sum b̂_i = b_i + v_i (rows < l only) feeds D.
* D's output b̃_i goes to B and to the lower adder.
* The lower adder's sum r̃_i = b_i + b̃_i goes through switch a into row
  encoder i.
* B's parallel result A_j⁻¹ b̃, added to the held information column, is the
  coded column c_j.

```
 info ─► [A] ─ b_i ─┬─► (+) ─ b^_i ─► [D] ─ b~_i ─┬─► [B] ─► (+) ─► c_j
                    │    ▲ v_i                     │           ▲
                    │  switch b ◄─ [C] ◄─ switch a │       held info
                    │                         ▲    │
                    │                         │r~_i│
                    └──────────────────────► (+) ◄─┘
```

Schedule of one column, one row per clock:

* **Phase 0.** Module A has loaded the column (information rows only; the rest
  forced to 0). Module A emits b_0. Switch b selects row encoder 0, whose output
  is v_0. D emits b̃_0. B absorbs b̃_0. Row encoder 0 absorbs r̃_0 = b_0 ⊕ b̃_0.
* **Phases 1 … q−1.** The same for rows 1 … q−1. Both switches advance by one
  row per clock, so each row encoder acts once every q clocks, at 1/q of the
  clock rate.
* **End of phase q−1.** B has its result. The output column is
  c_j = info ⊕ A_j⁻¹ b̃. The next column can be loaded at the same edge.

A column therefore takes q clocks, and a codeword takes q³ = n clocks at full
rate, measured in the fast clock. In the row-encoder clock it is q² (= n^(2/3))
ticks.

## 5. The blocks

| file | block | what is inside |
|---|---|---|
| `herm_pkg.sv` | shared package | field arithmetic (shift-and-add multiplier, square-and-multiply power), ε, γ, y0, â(i), k_i, b̂(j), generator polynomials of E_i and D_l, all as constant functions |
| `module_a.sv` | Module A: A·d | q registers w_β loaded with d_β and multiplied each clock by the constant y0 + β (β for A′); the output is the XOR of the q registers |
| `module_b.sv` | Module B: A⁻¹·b̃ | q Horner accumulators acc_β ← acc_β·h_β + b̃_i plus a register for b̃_0, so the 1 − h^(q−1) entry and the A′⁻¹ row 0 come out right |
| `ec_encoder.sv` | row encoder for E_i | RS division LFSR of degree â(i) on the time-reversed word (roots ε^−(a+i(q+1))); Horner accumulator with ξ_0⁻¹ for the extension symbol |
| `module_c.sv` | Module C | q `ec_encoder`s (rows 0…q−1) with switch a (enable decoder) and switch b (output multiplexer) |
| `module_d.sv` | Module D: D_l encoder | q-register LFSR, generator chosen from 2(q+1) precomputed polynomials by (l, A or A′), plus b̃_0 added back at the last row |
| `herm_encoder.sv` | top | column and phase counters, handshake, the two adders, output register |

At the defaults, the top synthesises to about 720 word-level cells and 220
flip-flop bits. With q = 8 (GF(64), m = 100, n = 512) it needs about 2600
cells and 760 flip-flop bits. Doubling q thus costs about 3.5 times the logic,
in line with the O(q²) growth the construction promises. Both counts come from
a generic Yosys coarse synthesis, with no technology mapping. The generator
tables of module D are inferred as two small ROMs.

## 6. Top-level interface and timing

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset clears all state |
| `in_valid_i` / `in_ready_o` | in/out | valid/ready handshake for one information column |
| `in_col_i[q]` | in | the column, row r on `[r]`; rows ≥ `in_n_info_o` are ignored |
| `in_col_idx_o`, `in_n_info_o` | out | index j of the column expected next, and b̂(j) |
| `out_valid_o` | out | one-clock pulse: a coded column is on `out_col_o` |
| `out_col_o[q]`, `out_col_idx_o`, `out_last_o` | out | coded column c_j (held until the next), its index, and a flag for j = q² − 1 |

* Columns must be sent in order. The column count wraps after q² columns, so
  codewords follow each other without a gap.
* `in_ready_o` is high when the encoder is idle or in the last phase of a
  column, so the maximum rate is one column every q clocks.
* A column leaves q + 1 clocks after it was accepted.
* At full rate the next column, which may be column 0 of the next codeword, is
  accepted one clock before the current column leaves.

An assertion in the top checks an invariant of the datapath. On every row that
the row encoders fixed, the symbol written back must equal the symbol they
supplied.

## 7. Verification

Each block has a self-checking testbench in `tb/`. They compare against
`herm_ref_pkg.sv`, which redoes the field arithmetic differently: a carry-less
product followed by a separate reduction. It also takes matrix entries from
their closed forms.

* `tb_module_a`, `tb_module_b`: products with A, A′, A⁻¹ and A′⁻¹ for random
  columns, output timing, and the round trip A⁻¹(A x) = x.
* `tb_ec_encoder`, `tb_module_c`: q² symbol words, with random idle clocks, are
  checked against the defining sums of E_i.
* `tb_module_d`: every l = 0…q for both matrices. Rows < l must pass through,
  and the first q − l rows of A⁻¹ b̃ must be zero.
* `tb_herm_encoder` runs the whole encoder at its default size. It streams 24
  random codewords, some back to back and some with random input gaps. Each
  output array is checked for unchanged information symbols and for **all 25
  syndromes S_ab being zero**, with the points evaluated from the curve itself.
  It also checks the q + 1 clock latency, the q³-clock codeword period, and that
  information-only, mixed, check-only and A′ columns as well as input stalls
  all occurred. Once, in the middle of a codeword, the test resets the encoder
  and sends that codeword again.

The full encoder has also been run at m = 8, 12, 15, 16, 22, 37, 45 and 59, and
all syndromes were zero. At m = 8 and 12, where no column is check-only, the
only failure was the testbench's deliberate "no check-only column" count. With
the package switched to q = 8 (GF(64), x⁶ + x + 1, m = 100, a length-512 code),
four codewords also passed every syndrome check.

To run one test with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/herm_pkg.sv tb/herm_ref_pkg.sv tb/tb_herm_encoder.sv \
    --top-module tb_herm_encoder
./obj_dir/Vtb_herm_encoder
```

It ends with a line `TB_RESULT checks=N failures=F`. Replace `tb_herm_encoder`
with `tb_module_a`, `tb_module_b`, `tb_ec_encoder`, `tb_module_c` or
`tb_module_d` to run the others.

## 8. Departures and choices

* **Numbers.** The paper fixes no q, field, modulus, m or y0. The defaults above
  are this design's choice. The code is in the class the paper restricts itself
  to, k < q³ − g − q (39 < 54).
* **Characteristic 2 only.** All signs are dropped (− = +). The A′⁻¹ form and the
  D_l check equations used here hold only in characteristic 2.
* **Row rates.** The paper writes â(b) = ⌊(m − (q−1−b)(q+1))/q⌋ and attaches it
  to row b of r̃. The syndrome expansion instead gives ⌊(m − b(q+1))/q⌋ for row b
  of r̃. That is what the row encoders use, and the full-code syndrome test
  confirms it. The paper's formula is correct for a different quantity: the
  number of information symbols in row b of the input array, (q² − â(b) − 1).
  The information layout above follows it.
* **Extension position.** The printed definition of the extended code writes the
  extra symbol as c_{q−1}. It is position q² − 1 here.
* **Number of checks of D_l.** The text says the parity checks are "the first l
  rows" of A⁻¹, with l the number of information symbols of D_l. To leave the
  information of c untouched, it must be the first q − l rows. The RTL uses
  q − l.
* **Step numbering.** The prose description of the block diagram swaps steps 4
  and 5 of the column algorithm. The RTL implements the algorithm as written.
* **Cycle count.** The introduction claims n^(2/3) clocks per codeword. The
  module descriptions (q clocks per column, row encoders at 1/q of the clock)
  give q³ = n fast clocks, which is q² row-encoder clocks. The RTL follows the
  module descriptions.
* **Insides of the modules.** The paper gives only their function. The Horner
  structures of A and B, the LFSR forms of C and D, the zero-latency D and the
  registered B output are this design's.
* **Clocking of Module C.** The slow row encoders use a clock enable once every
  q clocks rather than a divided clock.
* **Interface.** The handshake, counters, index outputs, reset and q + 1 clock
  latency are this design's. The paper says only that the encoder starts "when
  the left hand input becomes valid".
* **Not built.** The paper also derives syndrome computation for decoding from
  the same transform. It gives no architecture for it, so none is built here.

## 9. Changing the configuration

* **m.** `M_POLE` is a parameter of `herm_encoder` (default 30). Any m with
  ⌊m/q⌋ ≤ q² − 2 works, and an elaboration-time assertion checks the bound.
* **q and the field.** Change `GF_M`, `GF_POLY` and `Q` together in
  `herm_pkg.sv`. The rules are q² = 2^GF_M, GF_POLY must be primitive, and q
  must be a power of two; for example q = 8 with GF(64) and x⁶ + x + 1. All
  tables are recomputed at elaboration. The tests read the same package
  constants, but they have only been run at q = 4.
