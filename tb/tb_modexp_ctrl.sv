// tb_modexp_ctrl: modular exponentiation X^e mod N through the whole
// datapath, with a reduced middle layer of K = L = 2 moduli (N of about 124
// bits), for exponents of 1, 2 and 40 bits and several random bases.
//
// Constants are computed and loaded as in tb_l2_mont_mult; the base X and
// R2 = M^2 mod N are written to the operand banks, the controller runs, and
// the result (rebuilt by CRT) is compared with X^e mod N computed by binary
// square-and-multiply. Squarings and multiplications by the base are
// counted, and each must have happened.
module tb_modexp_ctrl;
  import rrns_pkg::*;
  import tb_rrns_pkg::*;

  localparam int unsigned K  = 2;
  localparam int unsigned L  = 2;
  localparam int unsigned NT = 1;            // multiplications in the chain
  localparam int unsigned NE = 6;            // exponentiations
  localparam int unsigned EB = 40;            // exponent bits
  localparam int unsigned EW = 2048;
  localparam int unsigned NW   = 1 + K + L;
  localparam int unsigned IW   = $clog2(NW);
  localparam int unsigned C1D  = (K + L) * L1_SLOTS;
  localparam int unsigned C1AW = $clog2(C1D);
  localparam int unsigned C2D  = l2c_depth(K, L);
  localparam int unsigned C2AW = $clog2(C2D);
  localparam int unsigned M0   = 17 * 253;

  logic clk = 0, rst_n = 0;
  logic c1_we = 0, c2_we = 0, op_we = 0, start = 0, exp_start = 0;
  logic [1:0] op_sel = '0;
  logic [EW-1:0] exponent = '0;
  logic [$clog2(EW+1)-1:0] ebits = '0;
  logic exp_busy, exp_done;
  int unsigned n_sq = 0, n_mul = 0;
  logic [C1AW-1:0] c1_addr = '0;
  logic [C2AW-1:0] c2_addr = '0;
  logic [IW-1:0]   op_idx = '0, res_idx = '0;
  vec_t c1_wdata = '0, c2_wdata = '0, op_wdata = '0, res_rdata;
  logic busy, done;
  int unsigned checks = 0, failures = 0;
  int unsigned n_red = 0, n_postponed = 0, n_mrc = 0, n_mrc_b = 0, n_baseext = 0;

  always #5 clk = ~clk;

  rrns_top #(.K(K), .L(L)) dut (.*);

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) begin
    if (dut.u_mm.start && exp_busy) begin
      if (dut.u_mm.y_src == Y_RES)  n_sq++;
      if (dut.u_mm.y_src == Y_BASE) n_mul++;
    end
    if (dut.red_start) begin
      n_red++;
      if (dut.u_mm.phase == P_XIJ || dut.u_mm.phase == P_XII) n_postponed++;
      if (dut.u_mm.phase == P_XII) n_baseext++;
    end
    if (dut.u_mm.phase == P_MRC && dut.u_mm.term == 1) begin
      n_mrc++;
      if (dut.lprod[LANE_M0] != 0) n_mrc_b++;   // eta_0 >= 253
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic big_t rand_big(int unsigned bits);
    big_t r = 0;
    for (int unsigned k = 0; k < (bits + 31) / 32; k++) r = (r << 32) | big_t'($urandom);
    return r;
  endfunction

  function automatic w_t bmodw(big_t x, w_t n);
    return w_t'(x % big_t'(n));
  endfunction

  // a value modulo M0 as a word (lanes 0 and 18 carry it)
  function automatic vec_t m0_vec(w_t v);
    return to_vec(v % M0);
  endfunction

  w_t   ms [];
  w_t   mm;                          // bottom left product m
  big_t bigM, bigMp, nmod;
  vec_t xw [NW], yw [NW], rw [NW];

  task automatic load_c1();
    for (int unsigned k = 0; k < K + L; k++) begin
      vec_t c [L1_SLOTS];
      l1_consts(ms[k], c);
      for (int unsigned t = 0; t < L1_SLOTS; t++) begin
        @(negedge clk);
        c1_we = 1; c1_addr = C1AW'(k * L1_SLOTS + t); c1_wdata = c[t];
      end
    end
    @(negedge clk);
    c1_we = 0;
  endtask

  task automatic wr_c2(int unsigned a, vec_t v);
    @(negedge clk);
    c2_we = 1; c2_addr = C2AW'(a); c2_wdata = v;
  endtask

  // top-layer constants, H_s = 1, S_i = 1, K_s = m mod M_s
  task automatic load_c2();
    w_t m0 = M0;
    for (int unsigned i = 1; i <= K; i++) begin
      w_t mi = ms[i - 1], mr = 1, nr = bmodw(nmod, mi), mk = mm % mi, v;
      for (int unsigned t = 1; t <= K; t++) if (t != i) mr = mulmod(mr, ms[t - 1], mi);
      v = mulmod(mulmod(mi - inv_mod(nr, mi), mulmod(mk, mk, mi), mi), inv_mod(mr, mi), mi);
      wr_c2(l2c_c(K, L, i), to_vec(v));
    end
    wr_c2(l2c_d0(K, L, 0), m0_vec(inv_mod(bmodw(bigM, m0), m0)));
    for (int unsigned i = 1; i <= K; i++)
      wr_c2(l2c_d0(K, L, i), m0_vec(mulmod(inv_mod(ms[i - 1] % m0, m0), bmodw(nmod, m0), m0)));
    for (int unsigned j = 1; j <= L; j++) begin
      w_t mj = ms[K + j - 1], mk = mm % mj;
      wr_c2(l2c_dj(K, L, j, 0), to_vec(mulmod(mulmod(mk, mk, mj), inv_mod(bmodw(bigM, mj), mj), mj)));
      for (int unsigned i = 1; i <= K; i++)
        wr_c2(l2c_dj(K, L, j, i), to_vec(mulmod(mulmod(mk, inv_mod(ms[i - 1] % mj, mj), mj),
                                                bmodw(nmod, mj), mj)));
    end
    for (int unsigned j = 1; j <= L; j++) begin
      w_t mj = ms[K + j - 1], pr = 1;
      for (int unsigned t = 1; t <= L; t++) if (t != j) pr = mulmod(pr, ms[K + t - 1], mj);
      wr_c2(l2c_e(K, L, j), to_vec(mulmod(inv_mod(pr, mj), mm % mj, mj)));
    end
    wr_c2(l2c_f(K, L, 0), m0_vec(inv_mod(m0 - bmodw(bigMp, m0), m0)));
    for (int unsigned j = 1; j <= L; j++)
      wr_c2(l2c_f(K, L, j), m0_vec(inv_mod(ms[K + j - 1] % m0, m0)));
    for (int unsigned i = 1; i <= K; i++) begin
      w_t mi = ms[i - 1], mk = mm % mi, g0;
      g0 = mulmod(mk, mi - bmodw(bigMp, mi), mi);
      wr_c2(l2c_g(K, L, i, 0), to_vec(g0));
      wr_c2(l2c_g(K, L, i, 1), to_vec(253 * g0));
      for (int unsigned j = 1; j <= L; j++) begin
        w_t pr = 1;
        for (int unsigned t = 1; t <= L; t++) if (t != j) pr = mulmod(pr, ms[K + t - 1], mi);
        wr_c2(l2c_g(K, L, i, j + 1), to_vec(mulmod(mk, pr, mi)));
      end
    end
    @(negedge clk);
    c2_we = 0;
  endtask

  // words of an integer x
  task automatic enc(big_t x, output vec_t w [NW]);
    w[0] = m0_vec(bmodw(x, M0));
    for (int unsigned s = 1; s < NW; s++) w[s] = to_vec(bmodw(x, ms[s - 1]));
  endtask

  // CRT over the right base
  function automatic big_t dec(vec_t w [NW]);
    big_t z = 0;
    for (int unsigned j = 1; j <= L; j++) begin
      w_t   mj = ms[K + j - 1], xj = from_vec(w[K + j]) % mj;
      big_t q  = bigMp / big_t'(mj);
      w_t   c  = mulmod(xj, inv_mod(bmodw(q, mj), mj), mj);
      z = (z + big_t'(c) * q) % bigMp;
    end
    return z;
  endfunction

  task automatic run_mult(vec_t a [NW], vec_t b [NW], big_t xv, big_t yv, output big_t zv);
    int unsigned cyc, exp_cyc;
    for (int unsigned s = 0; s < NW; s++) begin
      @(negedge clk);
      op_we = 1; op_sel = 2'd0; op_idx = IW'(s); op_wdata = a[s];
      @(negedge clk);
      op_sel = 2'd1; op_wdata = b[s];
    end
    @(negedge clk);
    op_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    exp_cyc = 2 + (K + L) * 23 + K * 23 + (K + 1) + L * (K + 23) + L * 23 + (L + 1) + 2
            + K * (L + 24);
    check(cyc == exp_cyc, $sformatf("cycles %0d, expected %0d", cyc, exp_cyc));
    for (int unsigned s = 0; s < NW; s++) begin
      res_idx = IW'(s);
      #1;
      rw[s] = res_rdata;
    end
    zv = dec(rw);
    check(((zv % nmod) * (bigM % nmod)) % nmod == ((xv % nmod) * (yv % nmod)) % nmod, "z*M = x*y mod N");
    check(zv < big_t'(19 * K) * nmod, "z < 19K*N");
    check((w_t'(rw[0][LANE_253]) + 253 * ((w_t'(rw[0][0]) + 17 * 17 - w_t'(rw[0][LANE_253]) % 17)
           * INV253_MOD17 % 17)) == bmodw(zv, M0), "redundant word = z mod M0");
    for (int unsigned s = 1; s < NW; s++) begin
      w_t v = from_vec(rw[s]);
      check(v % ms[s - 1] == bmodw(zv, ms[s - 1]), $sformatf("word %0d = z mod M_s", s));
      check(v < 18 * ms[s - 1], $sformatf("word %0d < 18 M_s", s));
    end
  endtask

  task automatic read_result(output big_t zv);
    for (int unsigned s = 0; s < NW; s++) begin
      res_idx = IW'(s);
      #1;
      rw[s] = res_rdata;
    end
    zv = dec(rw);
    check(zv < big_t'(19 * K) * nmod, "result < 19K*N");
    for (int unsigned s = 1; s < NW; s++) begin
      w_t v = from_vec(rw[s]);
      check(v % ms[s - 1] == bmodw(zv, ms[s - 1]), $sformatf("word %0d = result mod M_s", s));
    end
  endtask

  // X^e mod N through the exponentiation controller
  task automatic run_exp(big_t xv, big_t ev, int unsigned nb);
    big_t r2, ref_v, zv;
    vec_t w [NW];
    r2 = ((bigM % nmod) * (bigM % nmod)) % nmod;
    ref_v = 1;
    for (int k = int'(nb) - 1; k >= 0; k--) begin
      ref_v = (ref_v * ref_v) % nmod;
      if (ev[k]) ref_v = (ref_v * xv) % nmod;
    end
    enc(xv, xw);
    enc(r2, w);
    for (int unsigned s = 0; s < NW; s++) begin
      @(negedge clk);
      op_we = 1; op_sel = 2'd0; op_idx = IW'(s); op_wdata = xw[s];
      @(negedge clk);
      op_sel = 2'd1; op_wdata = w[s];
    end
    @(negedge clk);
    op_we = 0;
    exponent = EW'(ev);
    ebits = $bits(ebits)'(nb);
    exp_start = 1;
    @(negedge clk);
    exp_start = 0;
    while (!exp_done) @(negedge clk);
    read_result(zv);
    check(zv % nmod == ref_v, $sformatf("X^e mod N for a %0d-bit exponent", nb));
  endtask

  initial begin
    big_t xv, yv, zv, bound;
    w_t   b1;
    b1 = 160'd57669314532864493430;
    mm = left_prod();
    primes_below(b1, K + L, ms);
    bigM = 1;
    bigMp = 1;
    for (int unsigned i = 0; i < K; i++) bigM = bigM * big_t'(ms[i]);
    for (int unsigned j = 0; j < L; j++) bigMp = bigMp * big_t'(ms[K + j]);
    bound = bigM / big_t'(38 * K);
    if (bound > (big_t'(1) << 2048)) begin
      nmod = rand_big(2048);
      nmod[2047] = 1'b1;
      nmod = nmod & ((big_t'(1) << 2048) - 1);
    end else begin
      nmod = rand_big(4096) % bound;
    end
    nmod[0] = 1'b1;
    for (int unsigned s = 0; s < K + L; s++) if (bmodw(nmod, ms[s]) == 0) nmod = nmod + 2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_c1();
    load_c2();
    xv = rand_big(4096) % nmod;
    yv = rand_big(4096) % nmod;
    enc(xv, xw);
    enc(yv, yw);
    for (int unsigned n = 0; n < NT; n++) begin
      run_mult(xw, yw, xv, yv, zv);
      xv = zv;
      yv = zv;
      xw = rw;
      yw = rw;
    end
    for (int unsigned n = 0; n < NE; n++) begin
      big_t ev;
      int unsigned nb;
      nb = (n == 0) ? 1 : (n == 1) ? 2 : EB;
      ev = rand_big(EW) & ((big_t'(1) << nb) - 1);
      ev[nb - 1] = 1'b1;
      xv = rand_big(4096) % nmod;
      run_exp(xv, ev, nb);
    end
    check(n_red > 0, "bottom-layer reductions ran");
    check(NE == 0 || n_sq > 0, "exponentiation squarings ran");
    check(NE == 0 || n_mul > 0, "exponentiation multiplications ran");
    $display("exponentiation: squarings=%0d multiplications=%0d", n_sq, n_mul);
    check(n_postponed > 0, "postponed reductions ran");
    check(n_mrc > 0, "mixed-radix conversions of eta_0 ran");
    check(n_baseext > 0, "base extensions ran");
    $display("reductions=%0d postponed=%0d mrc=%0d (b>0: %0d) base_extensions=%0d",
             n_red, n_postponed, n_mrc, n_mrc_b, n_baseext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
