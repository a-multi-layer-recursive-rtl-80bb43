# A recursive residue number system: 2048-bit modular arithmetic from 8-bit tables

A residue number system (RNS) holds an integer as its remainders modulo a set
of pairwise coprime moduli. Additions and multiplications then work on each
remainder separately, with no carries between them. Two things stop you from
using this directly for RSA-sized numbers. First, there are not enough small
moduli: all byte-sized moduli together cover only about 363 bits. Second,
modular reduction by a 2048-bit N is not an RNS operation.

This design fixes both by **stacking RNS layers**. A full-RNS Montgomery
multiplication (of the Bajard–Imbert type, extended to inputs that are only
*pseudo-residues*, i.e. congruent to the right value but not fully reduced)
gives you arithmetic modulo a large modulus using an RNS of smaller moduli.
Apply the same trick again, with a layer of byte-sized moduli underneath, and
the "small" moduli of the middle layer become virtual: every one of their
operations is itself a Montgomery reduction on the bottom layer. In the end
every arithmetic operation is a lookup in a 256 x 256 table of one of 19
byte moduli. There are no carries anywhere, not even inside the modular
operations, and the 19 lanes run in parallel.

The RTL implements the three-layer configuration for a 2048-bit modulus N:

| layer  | moduli | size | role |
|--------|--------|------|------|
| bottom | m0 = 17; left 256, 251, 249, 247, 241, 239, 235, 199, 197; right 191, 193, 211, 217, 223, 227, 229, 233, 253 | 8 bit | real arithmetic, one lane each |
| middle | M0 = 17·253; left M_1..M_32; right M_33..M_64 (the 64 largest primes below B1 = 57 669 314 532 864 493 430) | about 66 bit | virtual, each value is 19 bottom residues |
| top    | N | up to about 2090 bit | the modulus of the application |

The bottom-layer left product m = 2 097 065 983 013 254 306 560 (about 2^70.8)
is the Montgomery constant for the middle moduli. The product M of the 32 left
middle moduli (about 2^2100.6) is the Montgomery constant for N.

## Files

| file | content |
|------|---------|
| `rtl/rrns_pkg.sv` | moduli, lane roles, `vec_t` (19 bytes = one middle-layer value), constant address maps, enums |
| `rtl/rns_lane.sv`, `rtl/rns_lane_array.sv` | the 19 lanes: a multiplication and an addition table per bottom modulus |
| `rtl/l1_reducer.sv` | Montgomery reduction modulo a middle modulus, run on the bottom layer |
| `rtl/l2_mont_mult.sv` | Montgomery multiplication modulo N, run on the middle layer |
| `rtl/modexp_ctrl.sv` | X^e mod N by square-and-multiply |
| `rtl/const_ram.sv` | constant storage (two instances) |
| `rtl/rrns_top.sv` | everything wired together |
| `tb/` | self-checking testbenches and a big-integer reference package |

## Pseudo-residues and the growth bounds

Nothing below the top is ever fully reduced. A middle-layer value that stands
for "x mod M_s" is any integer congruent to x that lies in [0, 18·M_s). The
factor 18 is the *expansion bound* of the middle layer. The bottom
reduction returns z < h/m + M_s. Every middle modulus lies below m/36, so an
h below (18·M_s)^2 gives z < 9·M_s + M_s. Such results can be multiplied
again without ever being fully reduced.

At the top, with K = 32 left moduli, a result z of a Montgomery
multiplication lies below 19K·N = 608·N, provided N ≤ M/(38K). Again results
can be fed straight back as operands. This is what makes exponentiation work
without any final subtraction.

Every middle-layer integer must stay below the bottom dynamic range
17·m·m' (about 2^144.6). The postponed sums are the largest ones. They have
33 or 34 products of a reduced value and a constant below M_s, and they stay
far below (18·M_s)^2.

## Bottom layer: the table lanes

`rns_lane_array` has one lane per bottom modulus. Each lane holds
`MUL[a][b] = a·b mod m_s` and `ADD[c][p] = (c + p) mod m_s`, both 2^16 x 8
bit, and returns `prod = a·b mod m_s` and `mac = (c + a·b) mod m_s` in the
same cycle. The tables accept any byte, not only reduced residues. The
reduction relies on this: it feeds a residue of one lane (say mu_i < 256)
into the table of another lane (say mod 17). The table contents come from the
two formulas above and are filled at start-up. The one lane array is shared:
the reducer drives it while it is busy, the top-layer sequencer otherwise.
That gives 19 multiplication and 19 addition tables in all.

## Bottom layer: Montgomery reduction modulo a middle modulus (`l1_reducer`)

Input: h as 19 residues, for a middle modulus M_s. Output: z = (h + u·M_s)/m
as 19 residues, with z ≡ h·m^-1 (mod M_s). All bottom arithmetic is exact, so
this is the plain full-RNS Montgomery reduction with a redundant modulus. Each
step below is one cycle. In every cycle all lanes work in parallel and one
residue is broadcast to every lane:

| step | lanes | operation |
|------|-------|-----------|
| 0 | left i | mu_i = h_i · C_i |
| 0 | 0, right j | acc = h · D_{.,0} |
| 1..9 | 0, right j | acc += mu_i · D_{.,i}, mu_i broadcast. This gives xi_0 = z mod 17 and xi_j = z mod m_j |
| 10 | right j | eta_j = xi_j · E_j |
| 10 | 0 | acc = xi_0 · F_00 |
| 11..19 | 0 | acc += eta_j · F_0j. This gives eta_0 = q, the overflow count of the CRT sum |
| 11..19 | left i | acc += eta_j · G_ij |
| 20 | left i | acc += eta_0 · G_i0. This gives xi_i = z mod m_i (base extension) |

The constants for middle modulus M_s, with m and m' the left and right bottom
products. The index i runs over the left lanes, j over the right lanes.

- C_i = −M_s^-1 · (m/m_i)^-1 mod m_i
- D_00 = m^-1 mod 17
- D_0i = M_s · m_i^-1 mod 17
- D_j0 = m^-1 mod m_j
- D_ji = m_i^-1 · M_s mod m_j
- E_j = (m'/m_j)^-1 mod m_j
- F_00 = (−m')^-1 mod 17
- F_0j = m_j^-1 mod 17
- G_i0 = −m' mod m_i
- G_ij = (m'/m_j) mod m_i

They are stored as 21 words of 19 lanes per middle modulus. Word t holds each
lane's constant for step t:

- lane 0: word 0 D_00, 1..9 D_0i, 10 F_00, 11..19 F_0j
- left lane i: word 0 C_i, 11..19 G_ij, 20 G_i0
- right lane j: word 0 D_j0, 1..9 D_ji, 10 E_j

The base address is `mod_idx·21`. Latency: `done` pulses 22 cycles after
`start`.

## Top layer: Montgomery multiplication modulo N (`l2_mont_mult`)

An operand x is 65 words. Word 0 holds x mod M0, where M0 = 17·253 lives in
lanes 0 and 18: the pair (x mod 17, x mod 253) is x mod M0 by the CRT. Words
1..64 hold pseudo-residues of x modulo M_1..M_64. The representation
constants are all 1, and so are the sign factors S_i. After the products of
step A1 the constants therefore carry K_s = m mod M_s. `R_s(·)` below is one
call of the bottom reducer. Each job sums its terms in a 19-lane
accumulator, one term per cycle, and then calls the reducer if it needs one.

| phase | jobs | computation |
|-------|------|-------------|
| A1 | s = 0..64 | chi_0 = x_0·y_0; chi_s = R_s(x_s·y_s) |
| MU | i = 1..32 | mu_i = R_i(chi_i · C_i) |
| XI0 | 1 | xi_0 = chi_0·D_00 + Σ mu_i·D_0i (mod M0, lanes 0 and 18) |
| XIJ | j = 1..32 | xi_j = R_j(chi_j·D'_j0 + Σ_i mu_i·D'_ji), postponed reduction |
| ETA | j = 1..32 | eta_j = R_j(xi_j · E_j) |
| ETA0 | 1 | eta_0 = xi_0·F_00 + Σ eta_j·F_0j (mod M0) |
| MRC | 1 | eta_0 = a + 253·b, with a = eta_0 mod 253 and b = (eta_0 − a)·253^-1 mod 17 |
| XII | i = 1..32 | xi_i = R_i(a·G'_i0 + b·(253·G'_i0) + Σ_j eta_j·G'_ij), postponed reduction |

Three points need explaining.

- **Postponed reduction.** XIJ and XII sum all 33 (or 34) products as exact
  integers in the bottom lanes and reduce only once. This is why every
  constant in those sums carries an extra factor m.
- **Residues modulo M0.** The residue of a middle-layer value mu_i modulo M0
  is free: it is just lanes 0 and 18 of its word.
- **Multiplying by eta_0.** eta_0 is only known modulo M0 (as a lane pair).
  Multiplying a middle-layer constant by it needs its integer value, so MRC
  converts it to mixed-radix form with two lookups in the mod-17 tables:
  (eta_0 mod 17) + 16·a, then times 8 (8 = 253^-1 mod 17). The stored word
  253·G'_i0 then turns eta_0·G'_i0 into two broadcast multiplies.

The words of chi (later overwritten by xi) and of mu/eta are the two
65-word registers of the algorithm. Constants (with M' the right middle
product, and i, j running over the left and right middle moduli):

- C_i = −N^-1 · m^2 · (M/M_i)^-1 mod M_i
- D_00 = M^-1 mod M0
- D_0i = M_i^-1 · N mod M0
- D'_j0 = m^2 · M^-1 mod M_j
- D'_ji = m · M_i^-1 · N mod M_j
- E_j = m · (M'/M_j)^-1 mod M_j
- F_00 = (−M')^-1 mod M0
- F_0j = M_j^-1 mod M0
- G'_i0 = −m·M' mod M_i
- 253·G'_i0 (the integer)
- G'_ij = m·(M'/M_j) mod M_i

Each constant is written as a word of its 19 bottom residues. The constants
modulo M0 use only lanes 0 and 18. Their word addresses are the functions
`l2c_*` in `rrns_pkg`. Only these words depend on N; the bottom-reduction
constants depend only on the middle moduli.

Cycle count from `start` to `done`:
2 + 23(K+L) + 23K + (K+1) + L(K+23) + 23L + (L+1) + 2 + K(L+24).
That is 6 629 cycles for K = L = 32, and 233 for K = L = 2. In each cycle all
19 lanes do one multiply and one add lookup, so one multiplication modulo N
costs about 126 000 lane operations. A simple count of the algorithm's
byte-modulus operations, 24·K·9^2 + 8·K^2·9 = 135 936 for K = 32, predicts
about the same.

## Exponentiation (`modexp_ctrl`)

The host writes X into the x bank and R2 = M^2 mod N into the y bank, then
pulses `exp_start` with the exponent and its bit length. The controller first
computes MM(X, R2), the Montgomery form of X. It then scans the exponent bits
below the leading one from the top. For each bit it squares the running value
in place, and multiplies by the Montgomery form of X when the bit is 1. The
first squaring also copies the Montgomery form of X into a third bank. A
final MM(·, 1) leaves the Montgomery form. Using the result bank in place
works because job s of phase A1 reads only word s of its operands and writes
word s only when it ends. A 500-bit exponent with a 2048-bit N takes about
750 multiplications, roughly 5 million cycles.

## Using the top (`rrns_top`)

1. Choose the middle moduli: the K+L largest primes below B1. Compute both
   constant sets with the formulas above. Write them through `c1_*`
   (address `s·21 + t` for middle modulus index s = 0..63) and `c2_*`.
2. Encode operands. Word 0 is `to_vec(x mod 4301)`. Word s is the 19
   residues of `x mod M_s`. Write them with `op_we`, `op_sel` (0 x, 1 y,
   2 base) and `op_idx`.
3. Pulse `start` (one multiplication) or `exp_start` (exponentiation). Wait
   for `done` or `exp_done`.
4. Read the words with `res_idx`/`res_rdata`. Decode each right word by CRT
   over the 19 bottom moduli to an integer below 18·M_j. Then CRT those over
   the right middle moduli to get z. The result is congruent to the answer
   modulo N and lies below 19K·N, so reduce it once by N at the end.

All writes take one word per clock. Reset is asynchronous and active-low.
The constant RAMs and the tables read asynchronously.

## Verification

| testbench | size | what it checks |
|-----------|------|----------------|
| `tb_rns_lane_array` | full | 3000 random and corner operand sets against integer `%` in every lane |
| `tb_l1_reducer` | 4 middle moduli | 400 random h < (18·M_s)^2: every lane of z against a binary model of (h+u·M_s)/m; z·m ≡ h; z < 18·M_s; latency 22; the example's m and m', and B1 ≤ m/36 |
| `tb_l2_mont_mult` | K = L = 2 (N about 124 bits) | a chain of 6 multiplications fed back in place: z·M ≡ x·y (mod N), z < 19K·N, every word consistent and below 18·M_s, exact cycle count, reductions / postponed reductions / mixed-radix conversions / base extensions each seen |
| `tb_modexp_ctrl` | K = L = 2 | X^e mod N for exponents of 1, 2 and 40 bits against binary square-and-multiply |
| `tb_rrns_top` | full default size, 2048-bit N | 4 chained multiplications with the same checks, then exponentiations with 1-, 2- and 500-bit exponents (about 6 s of simulation) |

The testbenches compute every constant and every expected value with plain
binary big-integer arithmetic in `tb/tb_rrns_pkg.sv`: extended Euclid,
Miller–Rabin with the 12 prime bases up to 37, and CRT. They do not use
the table datapath. To run one with Verilator:

    verilator --binary --timing -Wno-fatal --top-module tb_rrns_top \
        -y rtl -y tb +libext+.sv rtl/rrns_pkg.sv tb/tb_rrns_pkg.sv tb/tb_rrns_top.sv
    ./obj_dir/Vtb_rrns_top

Each testbench ends with a line `TB_RESULT checks=N failures=F`.

To change the size, override `K` and `L` on `rrns_top`. N must stay below
M/(38K), and the middle moduli must be primes below B1. The postponed
reductions stay inside the reducer's input range only while K and L are at
most about 4·9/δ = 36, where δ is the largest ratio between two middle
moduli (here δ is 1 to within 10^-17).

## Where this RTL departs from, or adds to, the published method

- **Scheduling is this design's own.** The method leaves open how the work is
  spread over hardware. Here the 19 lanes run in parallel and everything
  above them is sequential: one reducer, one middle-layer job at a time. The
  step order inside the reducer, the constant slot layout, the handshakes,
  and the asynchronous-read memories are also this design's choices.
- **Representation constants are all 1, and S_i = 1.** So steps 2 and 10 of
  Algorithm 2 (the mu and eta multiplications) are not skipped. The published
  improvement that removes them, by picking H_s and S_i cleverly, is not
  implemented.
- **eta_0 uses eta_j.** The published Algorithm 2 writes the eta_0 sum with
  mu_{k+1..k+l}. Its defining equation and its proof use eta_j, and so does
  this RTL.
- **B1 value.** The example's printed bound B1 = 57 669 314 532 864 493 430 is
  smaller than the formula m/36 = 58 251 832 861 479 286 293. The middle
  primes are taken below the printed (safer) value.
- **The mixed-radix digit b is rarely nonzero.** b ≠ 0 needs eta_0 ≥ 253. In
  every simulated run eta_0 (the base-extension overflow count) stayed well
  under 253. The b path is built and follows the formulas, but
  the testbenches do not exercise it.
- **Off-line work.** Choosing primes and computing constants is left to the
  host, as in the published method, where updating them for a new N need not
  be protected. The testbenches do this work.
- **Not handled.** e = 0 is not supported. A 4096-bit N would need K = L of
  about 64 (a parameter change). That size was not simulated.
- **Synthesis.** The 38 tables are 2.5 MB of ROM, which dominates the area.
