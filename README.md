# PPAC: an all-digital in-memory processor for matrix-vector-product-like operations

PPAC (Parallel Processor in Associative CAM) starts from a content-addressable
memory and makes it compute. A CAM compares every stored word with an input
word at once. PPAC computes how *similar* each word is to the input: it
counts the equal bits per row and hands that count to a small ALU in every row.
That one count, combined with a few registers per row, gives all of these:

* Hamming similarity and Hamming distance for all rows in one cycle;
* complete-match and threshold ("similarity") CAM lookups;
* 1-bit matrix-vector products (MVPs) `y = A x` with entries in {-1,+1} or {0,1}, in any mix;
* multi-bit MVPs computed bit-serially, for unsigned, 2's-complement and
  "odd" (all bits read as ±1) integers;
* MVPs over GF(2);
* two-level Boolean logic per bank, like a programmable logic array (PLA).

The array is written in synthesizable SystemVerilog. It is plain standard-cell
logic: there are no analog or custom cells.

## Array organisation

```
            column buses d[n], x[n], s[n] (shared by all M rows)
                 |           |            |
   bank 0   row 0: [subrow 0 | subrow 1 | ... | subrow BS-1] --> row ALU --> y[0]
            row 1: [   ...                               ]  --> row ALU --> y[1]   --> bank adder --> p[0]
             ...
   bank B-1 row M-1: ...                                    --> row ALU --> y[M-1] --> bank adder --> p[B-1]
```

* **Bit-cell** (`ppac_bitcell`): one stored bit `a`. It outputs `XNOR(x, a)`
  when its column select `s` is 0 and `AND(x, a)` when `s` is 1. XNOR multiplies
  two numbers in {-1,+1}, where a logic 0 stands for -1. AND multiplies two
  numbers in {0,1}.
* **Subrow** (`ppac_subrow`): V = N/BS cells plus a local adder. The adder
  counts the ones among the cell outputs. Only `ceil(log2(V+1))` wires leave
  each subrow.
* **Row ALU** (`ppac_row_alu`): it sums the subrow counts into `r_m`, registers
  it, and post-processes it. See the next section.
* **Row** (`ppac_row`): the BS subrows of one row together with its ALU. Column `n`
  (0-based) lies in subrow `n / V`, cell `n % V`.
* **Bank** (`ppac_bank`): R = M/B rows and a bank adder. The adder counts the
  rows whose output is non-negative: `p_b = sum ~y_m[MSB]`.
* **Write decoders** (`ppac_wr_decoder`): one turns `wr_en` into a write
  enable for row `addr` of the matrix memory. A second one turns `ctrl.weD`
  into a threshold write for row `addr`.
* **Top** (`ppac_top`): B banks, both decoders, and shared column buses and
  control. Shared types are in `ppac_pkg`.

The defaults are the largest configuration: M = N = 256, B = 16 banks of 16
rows, BS = 16 subrows of V = 16 cells, and vector and matrix entries of up to
LMAX = KMAX = 4 bits. The smaller arrays 16×16 (B = 1, BS = 1), 16×256 (B = 1,
BS = 16) and 256×16 (B = 16, BS = 1) use the same RTL with other parameters.

## The row ALU

This is where the modes differ, and it is the part to understand first.
Every row has the same datapath:

```
r      = sum of subrow counts                    (registered: pipeline stage)
v      = (popX2 ? 2r : r)
       + (vAcc ? (2*Vacc XOR {vAccXm1}) : 0) + vAccXm1
       + (nOZ ? Nreg : 0) - (cEn ? Creg : 0)
m      = v + (mAcc ? (2*Macc XOR {mAccXm1}) : 0) + mAccXm1
y_m    = m - Dreg
```

| register | loaded by | from | holds |
|---|---|---|---|
| `Vacc` | `weV` | `v` | the vector-bit accumulator (first accumulator) |
| `Nreg` | `weN` | `v` | `hsim(a_m, 1)` or `hsim(a_m, 0)`, for mixed number formats |
| `Creg` | `weC` | input `c` | the offset, usually N (or N/K) |
| `Macc` | `weM` | `m` | the matrix-bit accumulator (second accumulator) |
| `Dreg` | `weD` (row `addr`) | input `delta` | the threshold / bias `delta_m` |

XOR with `vAccXm1` plus a carry-in of `vAccXm1` is 2's-complement negation.
It gives the most significant bit of a signed number its negative weight. The
datapath is signed and `accw(N, LMAX, KMAX) = ceil(log2(N+1)) + LMAX + KMAX + 3`
bits wide, which is 20 bits at the defaults.

### Timing

The only register between the bit-cells and `y` is `r_m`. So:

* cycle t: drive `x` and `s` (and `wr_en`/`d` if writing);
* cycle t+1: drive the control word `ctrl` for that `x`. `y` and `p` for that
  `x` are valid in this cycle, and the ALU registers load at its end. The
  next `x` can be applied in this same cycle.

A 1-bit operation therefore takes two cycles, and a new one can start every
cycle. A bit-serial operation with P bit-planes gives its result P cycles
after its first plane. Matrix writes take effect at the rising edge (`wr_en`,
`addr`, `d`). Thresholds are written one row per cycle with `ctrl.weD`,
`addr` and `delta`.

### Mode recipes

Unnamed control bits are 0. In the recipes, `s = XNOR` means all columns use
XNOR, and N is the row length. Notation: `hsim(a, b)` is the number of equal
bits.

| mode | cells | ALU control | result |
|---|---|---|---|
| Hamming similarity | XNOR | Dreg = 0 | `y_m = hsim(a_m, x)` |
| complete-match CAM | XNOR | Dreg = N | match iff `y_m[MSB] == 0` (y_m = 0) |
| similarity CAM | XNOR | Dreg = threshold | match iff `hsim >= delta_m` |
| 1-bit A, x in {-1,+1} | XNOR | popX2, cEn, c = N | `y = 2r - N` |
| 1-bit A, x in {0,1} | AND | — | `y = r` |
| A in {-1,+1}, x in {0,1} | XNOR, first with x = all-ones, then with x | weN on the cycle after the all-ones input; then nOZ, cEn, c = N | `r + hsim(a,1) - N` |
| A in {0,1}, x in {-1,+1} | XNOR with x = all-zeros, then AND with x | weN on the cycle after the all-zeros input; then popX2, nOZ, cEn, c = N | `2r + hsim(a,0) - N` |
| GF(2) MVP | AND | — | `y_m[0]` |
| PLA min-term per row | AND, row holds the variable mask | Dreg = number of ones in the mask | row true iff `y_m == 0`; the bank function is `p_b > 0` |
| max-term per row | AND | Dreg = 1 | row true iff `y_m >= 0` |

The "N-term" (`hsim(a,1)` or `hsim(a,0)`) only has to be recomputed when the
matrix changes.

**L-bit vectors.** Bit-planes go in MSB first. The first plane is plain. Each
later plane sets `weV, vAcc`, so `v = 2*Vacc + p`, and `weV` stays set
throughout. For a signed (`int`) vector, the second plane also sets `vAccXm1`.
That negates the MSB's contribution once, and every later doubling keeps it
negative. For `oddint` vectors and {-1,+1} matrices, each plane also carries
`popX2, cEn`. An L-bit MVP takes L cycles.

**K-bit matrices.** Bit k of entry j is stored in column `k*G + j`, with
G = N/K entries per row. This column placement is one choice; any fixed one
works. To compute `A_k x`, the columns of the other significances are set to
AND and given `x = 0`, and the offset is `c = G`. The planes go in order,
matrix MSB group first and, inside each group, vector MSB first. The last plane of
each group sets `weM`, and for every group after the first also `mAcc`.
For a signed matrix, `mAccXm1` is set on the second group. A K-bit by L-bit
MVP takes K·L cycles: 16 cycles for 4-bit by 4-bit, with 64 entries per
256-bit row. The formats that need the N-term (LO = -1 on one side and LO = 0
on the other) work for K = 1 only, because the N-term would have to be
recomputed for every bit group.

Number formats (L bits): `uint` 0 … 2^L−1; `int` −2^(L−1) … 2^(L−1)−1;
`oddint`, where every bit counts as ±2^i: −(2^L−1) … 2^L−1, odd values only.

## Where this RTL makes its own choices

These points are not fixed by the published description of PPAC:

* **Storage.** The original bit-cell is an active-low latch written through a
  per-row clock gate. Here it is a rising-edge register with a write enable,
  which behaves the same and which synthesis maps onto a gated register. The
  library clock-gating cell itself is not modelled.
* **Column select polarity.** `s = 0` selects XNOR and `s = 1` selects AND.
* **Control distribution.** One control word, offset `c`, and column buses
  are shared by all rows. Each row still holds its own `Creg`, as the ALU
  diagram draws it. Thresholds are written per row by reusing the row address
  (`ctrl.weD` + `addr`).
* **Control timing.** Controls are applied one cycle after their `x`, aligned
  with the `r_m` register. No extra pipelining of controls or outputs is
  added.
* **Carry-in.** `vAccXm1`/`mAccXm1` enter the adders as a carry-in even when
  `vAcc`/`mAcc` is 0, as drawn. Keep them 0 when not accumulating.
* **Widths and reset.** The widths of `c`, `delta` and the datapath are
  chosen (see `accw`). `rst_n` is an asynchronous active-low reset of `r_m`
  and the ALU registers. The matrix memory has no reset and must be written
  before use.
* **Bank output.** `p_b` is combinational, like `y`.

Limits that follow from the architecture: an inner product whose entries need
more columns than one row has (for example 256 four-bit entries, that is 1024
columns) has to be split over rows and summed outside. Activation functions
and batch normalisation are not part of PPAC.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ppac_bitcell` | both operators for all inputs; hold when not written |
| `tb_ppac_subrow` | local popcount with random words, inputs and mixed selects |
| `tb_ppac_row_alu` | hand-worked mode recipes; the one-cycle delay of `r_m`; 3000 random control words against an integer model |
| `tb_ppac_row` | Hamming similarity streamed one per cycle; the ±1 inner product; mixed selects; a 2-bit vector |
| `tb_ppac_bank` | per-row min-term outputs and the bank adder |
| `tb_ppac_wr_decoder` | exhaustive decode |
| `tb_ppac_top` | every mode end to end on a 32×32 array (4 banks, 4 subrows) |
| `tb_ppac_full` | the same procedures on the default 256×256 array |

The two end-to-end benches share `tb/ppac_tb_tasks.svh`. Their expected
values are computed from the numbers that the bits represent, not from the
ALU equations. They also count each mechanism and fail if one never happened:
the back-to-back stream, CAM hit and miss, similarity match, the four 1-bit
formats, the stored N-term, vector and matrix accumulation, MSB negation,
GF(2), and PLA min-terms and max-terms.

The 4-bit by 4-bit test also checks that the result appears K·L + 1 cycles
after the first bit-plane.

To simulate with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -I. -y rtl \
    rtl/ppac_pkg.sv tb/tb_ppac_top.sv --top-module tb_ppac_top -Mdir obj_top
./obj_top/Vtb_ppac_top
```

Use `tb_ppac_full` for the full-size array. It builds in about two minutes,
and its simulation takes about a second. To change the array, override the
parameters of `ppac_top`: `M` and `N`, with `B` dividing `M` and `BS`
dividing `N`; `LMAX` and `KMAX` set the accumulator width.
