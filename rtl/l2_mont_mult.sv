// l2_mont_mult: Montgomery multiplication modulo the top-layer modulus N,
// computed with the middle-layer residue number system.
//
// The middle layer has a redundant modulus M0 = 17*253 (bottom lanes 0 and
// 18), K left moduli M_1..M_K with product M (the Montgomery constant for N)
// and L right moduli. An operand x is held as 1+K+L vectors: word 0 carries
// x mod M0 in lanes 0 and 18, word s = 1..K+L a pseudo-residue of x modulo
// M_s as 19 bottom residues. start computes z with z = x*y*M^-1 (mod N) into
// the result bank, in the same representation:
//   A1   chi_0 = x_0*y_0; chi_s = R_s(x_s*y_s)                 (Algorithm 1)
//   MU   mu_i = R_i(chi_i*C_i)
//   XI0  xi_0 = chi_0*D_00 + sum mu_i*D_0i          (mod M0, lanes 0/18)
//   XIJ  xi_j = R_j(chi_j*D'_j0 + sum mu_i*D'_ji)   (postponed reduction)
//   ETA  eta_j = R_j(xi_j*E_j)
//   ETA0 eta_0 = xi_0*F_00 + sum eta_j*F_0j         (mod M0: q of the base
//        extension)
//   MRC  eta_0 = a + 253*b in mixed radix form, a = eta_0 mod 253,
//        b = (eta_0 mod 17 - a) * 253^-1 mod 17, from the lane-0 tables
//   XII  xi_i = R_i(a*G'_i0 + b*253G'_i0 + sum eta_j*G'_ij)
//                                                   (base extension)
// R_s is the bottom-layer Montgomery reduction (l1_reducer) modulo M_s; all
// multiply-accumulates are one-cycle 19-lane operations on the shared lane
// array. The chi/xi bank and the mu/eta bank are the two registers of 1+K+L
// words of the algorithm; the operand banks X and Y are written through
// op_we. With representation constants H_s = 1 (so K_s = m mod M_s) and
// S_i = 1; these choices, the sequential order of the jobs and the
// handshake are this design's. x_res, y_src and b_cap are sampled with
// start: they make the result bank the x operand, pick the y operand (Y
// bank, result bank, base bank or the constant 1), and copy the result bank
// into the base bank while A1 reads it (used by exponentiation).
// Timing: start is taken when idle; busy stays high until done pulses once,
// with the result bank valid. A job of n terms takes n cycles, plus 22 if it
// ends in a reduction; a whole multiplication takes 2 + 23(K+L) + 23K +
// (K+1) + L(K+23) + 23L + (L+1) + 2 + K(L+24) cycles, 6629 for K = L = 32.
module l2_mont_mult
  import rrns_pkg::*;
#(
  parameter int unsigned K   = 32,
  parameter int unsigned L   = 32,
  parameter int unsigned NW  = 1 + K + L,                  // words per operand
  parameter int unsigned IW  = $clog2(NW),
  parameter int unsigned CAW = $clog2(l2c_depth(K, L)),
  parameter int unsigned MW  = $clog2(K + L)
) (
  input  logic           clk,
  input  logic           rst_n,
  // operand load and result read
  input  logic           op_we,
  input  logic [1:0]     op_sel,      // 0: x bank, 1: y bank, 2: base bank
  input  logic [IW-1:0]  op_idx,
  input  vec_t           op_wdata,
  input  logic [IW-1:0]  res_idx,
  output vec_t           res_rdata,
  // control
  input  logic           start,
  input  logic           x_res,       // x := current result (chi bank)
  input  ysrc_e          y_src,       // y := Y bank, result, base bank or 1
  input  logic           b_cap,       // copy the current result to the base bank
  output logic           busy,
  output logic           done,
  // top-layer constant RAM read port
  output logic [CAW-1:0] caddr,
  input  vec_t           cdata,
  // bottom-layer reducer
  output logic           red_start,
  output vec_t           red_h,
  output logic [MW-1:0]  red_idx,
  input  logic           red_done,
  input  vec_t           red_z,
  // shared lane array
  output vec_t           la,
  output vec_t           lb,
  output vec_t           lc,
  input  vec_t           lprod,
  input  vec_t           lmac
);

  phase_e phase;
  logic   waiting;               // reduction in flight
  logic [IW-1:0] job;            // s (A1), i or j (1-based elsewhere)
  logic [IW-1:0] term;
  vec_t   acc;
  res_t   mr_a, mr_b, mr_t;

  vec_t   xb  [NW];
  vec_t   yb  [NW];
  vec_t   bb  [NW];              // base bank (exponentiation)
  logic   x_res_q, b_cap_q;
  ysrc_e  y_src_q;
  vec_t   xa, ya;                // operand words of job s in phase A1
  vec_t   chi [NW];              // chi, overwritten by xi
  vec_t   mue [NW];              // mu_i, eta_0, eta_j

  // per-job description
  logic [IW-1:0] nterms;
  logic          do_red;
  logic [IW-1:0] dest;
  logic          dest_mue;
  logic          last;

  // Operand words of Algorithm 1. Job s reads word s only and writes chi[s]
  // only at its end, so the result bank can be an operand of the next
  // multiplication in place.
  always_comb begin
    xa = x_res_q ? chi[job] : xb[job];
    unique case (y_src_q)
      Y_BANK:  ya = yb[job];
      Y_RES:   ya = chi[job];
      Y_BASE:  ya = bb[job];
      default: ya = {NLANE{res_t'(1)}};       // the integer 1 in every word
    endcase
  end

  always_comb begin
    nterms   = IW'(1);
    do_red   = 1'b1;
    dest     = job;
    dest_mue = 1'b0;
    red_idx  = '0;
    caddr    = '0;
    la       = '0;
    lb       = cdata;
    lc       = (term == 0) ? '0 : acc;
    unique case (phase)
      P_A1: begin
        do_red  = (job != 0);
        red_idx = MW'(job - IW'(1));
        la      = xa;
        lb      = ya;
      end
      P_MU: begin
        dest_mue = 1'b1;
        red_idx  = MW'(job - IW'(1));
        caddr    = CAW'(l2c_c(K, L, 32'(job)));
        la       = chi[job];
      end
      P_XI0: begin
        nterms = IW'(K + 1);
        do_red = 1'b0;
        dest   = '0;
        caddr  = CAW'(l2c_d0(K, L, 32'(term)));
        la     = (term == 0) ? chi[0] : mue[term];
      end
      P_XIJ: begin
        nterms  = IW'(K + 1);
        dest    = IW'(K) + job;
        red_idx = MW'(IW'(K) + job - IW'(1));
        caddr   = CAW'(l2c_dj(K, L, 32'(job), 32'(term)));
        la      = (term == 0) ? chi[IW'(K) + job] : mue[term];
      end
      P_ETA: begin
        dest     = IW'(K) + job;
        dest_mue = 1'b1;
        red_idx  = MW'(IW'(K) + job - IW'(1));
        caddr    = CAW'(l2c_e(K, L, 32'(job)));
        la       = chi[IW'(K) + job];
      end
      P_ETA0: begin
        nterms   = IW'(L + 1);
        do_red   = 1'b0;
        dest     = '0;
        dest_mue = 1'b1;
        caddr    = CAW'(l2c_f(K, L, 32'(term)));
        la       = (term == 0) ? chi[0] : mue[IW'(K) + term];
      end
      P_MRC: begin
        // term 0: lane 0 computes (eta0 mod 17) - a ; term 1: times 253^-1
        nterms = IW'(2);
        do_red = 1'b0;
        la     = '0;
        lb     = '0;
        lc     = '0;
        if (term == 0) begin
          la[LANE_M0] = mue[0][LANE_253];
          lb[LANE_M0] = res_t'(NEG1_MOD17);
          lc[LANE_M0] = mue[0][LANE_M0];
        end else begin
          la[LANE_M0] = mr_t;
          lb[LANE_M0] = res_t'(INV253_MOD17);
        end
      end
      P_XII: begin
        nterms  = IW'(L + 2);
        red_idx = MW'(job - IW'(1));
        caddr   = CAW'(l2c_g(K, L, 32'(job), 32'(term)));
        if (term == 0)      la = {NLANE{mr_a}};
        else if (term == 1) la = {NLANE{mr_b}};
        else                la = mue[IW'(K) + term - IW'(1)];
      end
      default: ;
    endcase
    last      = (term == nterms - IW'(1));
    red_h     = lmac;
    red_start = (phase != P_IDLE) && !waiting && last && do_red;
  end

  assign res_rdata = chi[res_idx];

  // job count of each phase
  function automatic logic [IW-1:0] njobs(phase_e p);
    unique case (p)
      P_A1:          return IW'(K + L);          // s = 0..K+L
      P_MU, P_XII:   return IW'(K);
      P_XIJ, P_ETA:  return IW'(L);
      default:       return IW'(1);
    endcase
  endfunction

  function automatic phase_e next_phase(phase_e p);
    unique case (p)
      P_A1:    return P_MU;
      P_MU:    return P_XI0;
      P_XI0:   return P_XIJ;
      P_XIJ:   return P_ETA;
      P_ETA:   return P_ETA0;
      P_ETA0:  return P_MRC;
      P_MRC:   return P_XII;
      default: return P_IDLE;
    endcase
  endfunction

  logic job_end;
  assign job_end = (phase != P_IDLE) && (waiting ? red_done : (last && !do_red));

  always_ff @(posedge clk) begin
    if (op_we && !busy) begin
      unique case (op_sel)
        2'd0:    xb[op_idx] <= op_wdata;
        2'd1:    yb[op_idx] <= op_wdata;
        default: bb[op_idx] <= op_wdata;
      endcase
    end else if (phase == P_A1 && b_cap_q && !waiting && term == 0) begin
      bb[job] <= chi[job];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= P_IDLE;
      waiting <= 1'b0;
      job     <= '0;
      term    <= '0;
      acc     <= '0;
      mr_a    <= '0;
      mr_b    <= '0;
      mr_t    <= '0;
      x_res_q <= 1'b0;
      y_src_q <= Y_BANK;
      b_cap_q <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      for (int unsigned w = 0; w < NW; w++) begin
        chi[w] <= '0;
        mue[w] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (phase == P_IDLE) begin
        if (start) begin
          x_res_q <= x_res;
          y_src_q <= y_src;
          b_cap_q <= b_cap;
          phase <= P_A1;
          busy  <= 1'b1;
          job   <= '0;
          term  <= '0;
        end
      end else begin
        // lane operation of this cycle
        if (!waiting) begin
          acc <= lmac;
          if (phase == P_MRC) begin
            if (term == 0) begin
              mr_t <= lmac[LANE_M0];
              mr_a <= mue[0][LANE_253];
            end else begin
              mr_b <= lprod[LANE_M0];
            end
          end
          if (last) begin
            if (do_red) waiting <= 1'b1;
            else if (phase != P_MRC) begin
              if (dest_mue) mue[dest] <= lmac;
              else          chi[dest] <= lmac;
            end
            term <= '0;
          end else begin
            term <= term + IW'(1);
          end
        end else if (red_done) begin
          waiting <= 1'b0;
          if (dest_mue) mue[dest] <= red_z;
          else          chi[dest] <= red_z;
        end
        // job sequencing
        if (job_end) begin
          if (job == njobs(phase)) begin
            phase <= next_phase(phase);
            job   <= (next_phase(phase) == P_IDLE) ? '0 : IW'(1);
            if (next_phase(phase) == P_IDLE) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            job <= job + IW'(1);
          end
        end
      end
    end
  end

endmodule
