// rrns_pkg: types and constants shared by the recursive residue number system
// (RRNS) datapath.
//
// The bottom layer is a residue number system of 19 moduli of at most 8 bits:
// the redundant modulus m0 = 17, a "left" base of 9 moduli whose product m is
// the Montgomery constant used one layer up, and a "right" base of 9 moduli.
// Every value of the middle layer (a pseudo-residue modulo one of the large
// middle-layer moduli M_s) is carried as a vector of 19 bottom residues, one
// byte per lane. The choice of moduli and their left/right split follow the
// 2048-bit example of the design; lane order, byte width and the layout of
// the per-lane constant slots of the bottom-layer reduction are this
// implementation's own.
package rrns_pkg;

  localparam int unsigned NLANE = 19;      // bottom moduli incl. redundant m0
  localparam int unsigned K1    = 9;       // left bottom base size
  localparam int unsigned L1    = 9;       // right bottom base size
  localparam int unsigned RW    = 8;       // residue width (table index width)

  // Lane 0: m0; lanes 1..K1: left base; lanes K1+1..K1+L1: right base.
  localparam int unsigned BOTTOM_MOD [NLANE] = '{
    17,
    256, 251, 249, 247, 241, 239, 235, 199, 197,
    191, 193, 211, 217, 223, 227, 229, 233, 253
  };

  // The middle-layer redundant modulus is M0 = 17 * 253, i.e. the pair of
  // lanes 0 and LANE_253. A residue modulo M0 lives in these two lanes.
  localparam int unsigned LANE_M0  = 0;
  localparam int unsigned LANE_253 = NLANE - 1;
  localparam int unsigned INV253_MOD17 = 8;   // 253^-1 mod 17
  localparam int unsigned NEG1_MOD17   = 16;  // -1 mod 17

  typedef logic [RW-1:0] res_t;               // one bottom residue
  typedef res_t [NLANE-1:0] vec_t;            // one middle-layer value

  // Constant slots of the bottom-layer Montgomery reduction, per middle-layer
  // modulus. Slot t of lane s is the constant lane s uses in step t.
  //   lane 0      : 0 D00, 1..9 D0i, 10 F00, 11..19 F0j, 20 unused
  //   left lane i : 0 C_i, 1..10 unused, 11..19 G_ij, 20 G_i0
  //   right lane j: 0 D_j0, 1..9 D_ji, 10 E_j, 11..20 unused
  localparam int unsigned L1_SLOTS = K1 + L1 + 3;   // 21

  function automatic bit lane_is_left(int unsigned s);
    return (s >= 1) && (s <= K1);
  endfunction

  function automatic bit lane_is_right(int unsigned s);
    return (s >= K1 + 1);
  endfunction

  // Phases of the top-layer Montgomery multiplication (see l2_mont_mult)
  typedef enum logic [3:0] {
    P_IDLE, P_A1, P_MU, P_XI0, P_XIJ, P_ETA, P_ETA0, P_MRC, P_XII
  } phase_e;

  // Source of the second operand of a top-layer multiplication
  typedef enum logic [1:0] {Y_BANK, Y_RES, Y_BASE, Y_ONE} ysrc_e;

  // Word addresses of the top-layer constants (Algorithm 2 on the middle
  // layer with K left and L right middle-layer moduli). Indices i, j and the
  // term index t are as in the algorithm: i = 1..K, j = 1..L, t = 0 is the
  // term of chi (or of eta_0), t >= 1 the term of mu_t (or eta_t).
  //   C_i                      : K words
  //   D_{0,t}    t = 0..K      : K+1 words (only lanes 0 and 18 used)
  //   D'_{j,t}   t = 0..K      : L*(K+1) words
  //   E_j                      : L words
  //   F_{0,t}    t = 0..L      : L+1 words (only lanes 0 and 18 used)
  //   G'_{i,0}, 253*G'_{i,0}, G'_{i,t} t = 1..L : K*(L+2) words
  function automatic int unsigned l2c_c(int unsigned K, int unsigned L, int unsigned i);
    return i - 1;
  endfunction
  function automatic int unsigned l2c_d0(int unsigned K, int unsigned L, int unsigned t);
    return K + t;
  endfunction
  function automatic int unsigned l2c_dj(int unsigned K, int unsigned L, int unsigned j,
                                         int unsigned t);
    return 2 * K + 1 + (j - 1) * (K + 1) + t;
  endfunction
  function automatic int unsigned l2c_e(int unsigned K, int unsigned L, int unsigned j);
    return 2 * K + 1 + L * (K + 1) + j - 1;
  endfunction
  function automatic int unsigned l2c_f(int unsigned K, int unsigned L, int unsigned t);
    return 2 * K + 1 + L * (K + 2) + t;
  endfunction
  // t = 0: G'_{i,0}; t = 1: 253*G'_{i,0}; t = 2..L+1: G'_{i,t-1}
  function automatic int unsigned l2c_g(int unsigned K, int unsigned L, int unsigned i,
                                        int unsigned t);
    return 2 * K + 2 + L * (K + 3) + (i - 1) * (L + 2) + t;
  endfunction
  function automatic int unsigned l2c_depth(int unsigned K, int unsigned L);
    return 2 * K + 2 + L * (K + 3) + K * (L + 2);
  endfunction

endpackage
