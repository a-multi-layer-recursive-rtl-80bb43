// rrns_top: a three-layer recursive residue number system that multiplies
// modulo a large top-layer modulus N (2048 bits with the default sizes)
// using nothing but 8-bit table lookups.
//
// Layers: the bottom RNS of 19 byte-sized moduli (rns_lane_array, the only
// place where arithmetic happens); the middle layer of 1+K+L "virtual" moduli
// of about 66 bits, each value carried as 19 bottom residues, whose modular
// reduction is the bottom-layer Montgomery reduction (l1_reducer); and the
// top layer, the single modulus N, whose Montgomery multiplication is
// sequenced by l2_mont_mult. Both sequencers share the one lane array: the
// reducer drives it while it is busy, l2_mont_mult otherwise.
//
// Interface: the constants of both layers are loaded through c1_* (bottom
// reduction constants, L1_SLOTS words per middle-layer modulus) and c2_*
// (top-layer constants, which alone depend on N). Operands are written with
// op_*; start runs one Montgomery multiplication z = x*y*M^-1 mod N; done
// pulses when the result can be read with res_idx/res_rdata. exp_start runs
// a whole modular exponentiation X^e mod N (modexp_ctrl) on the operands
// X (x bank) and R2 = M^2 mod N (y bank); exp_done pulses when its result is
// in the result bank. Only N-specific constants have to be reloaded to
// change the modulus.
module rrns_top
  import rrns_pkg::*;
#(
  parameter int unsigned K    = 32,
  parameter int unsigned L    = 32,
  parameter int unsigned EW   = 2048,       // exponent width
  parameter int unsigned NW   = 1 + K + L,
  parameter int unsigned IW   = $clog2(NW),
  parameter int unsigned C1D  = (K + L) * L1_SLOTS,
  parameter int unsigned C1AW = $clog2(C1D),
  parameter int unsigned C2D  = l2c_depth(K, L),
  parameter int unsigned C2AW = $clog2(C2D)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            c1_we,
  input  logic [C1AW-1:0] c1_addr,
  input  vec_t            c1_wdata,
  input  logic            c2_we,
  input  logic [C2AW-1:0] c2_addr,
  input  vec_t            c2_wdata,
  input  logic            op_we,
  input  logic [1:0]      op_sel,
  input  logic [IW-1:0]   op_idx,
  input  vec_t            op_wdata,
  input  logic [IW-1:0]   res_idx,
  output vec_t            res_rdata,
  input  logic            start,
  output logic            busy,
  output logic            done,
  input  logic            exp_start,
  input  logic [EW-1:0]   exponent,
  input  logic [$clog2(EW+1)-1:0] ebits,
  output logic            exp_busy,
  output logic            exp_done
);

  localparam int unsigned MW = $clog2(K + L);

  vec_t la, lb, lc, lprod, lmac;
  vec_t r_la, r_lb, r_lc, m_la, m_lb, m_lc;
  vec_t c1_rdata, c2_rdata, red_h, red_z;
  logic [C1AW-1:0] c1_raddr;
  logic [C2AW-1:0] c2_raddr;
  logic [MW-1:0]   red_idx;
  logic red_start, red_busy, red_done;
  logic mm_start, mm_done, e_start, e_x_res, e_b_cap;
  ysrc_e e_y_src;

  // A single multiplication (start: x bank times y bank) or an
  // exponentiation (exp_start) drives the multiplier.
  modexp_ctrl #(.EW(EW)) u_exp (
    .clk (clk), .rst_n (rst_n),
    .start (exp_start && !busy), .exponent (exponent), .ebits (ebits),
    .busy (exp_busy), .done (exp_done),
    .mm_start (e_start), .mm_x_res (e_x_res), .mm_y_src (e_y_src),
    .mm_b_cap (e_b_cap), .mm_done (mm_done)
  );

  assign mm_start = exp_busy ? e_start : start;
  assign done     = mm_done && !exp_busy;

  rns_lane_array u_lanes (
    .a (la), .b (lb), .c (lc), .prod (lprod), .mac (lmac)
  );

  always_comb begin
    if (red_busy) begin
      la = r_la; lb = r_lb; lc = r_lc;
    end else begin
      la = m_la; lb = m_lb; lc = m_lc;
    end
  end

  const_ram #(.DEPTH(C1D)) u_c1 (
    .clk (clk), .we (c1_we), .waddr (c1_addr), .wdata (c1_wdata),
    .raddr (c1_raddr), .rdata (c1_rdata)
  );

  const_ram #(.DEPTH(C2D)) u_c2 (
    .clk (clk), .we (c2_we), .waddr (c2_addr), .wdata (c2_wdata),
    .raddr (c2_raddr), .rdata (c2_rdata)
  );

  l1_reducer #(.NMOD(K + L), .AW(C1AW)) u_red (
    .clk (clk), .rst_n (rst_n),
    .start (red_start), .h (red_h), .mod_idx (red_idx),
    .busy (red_busy), .done (red_done), .z (red_z),
    .caddr (c1_raddr), .cdata (c1_rdata),
    .la (r_la), .lb (r_lb), .lc (r_lc), .lprod (lprod), .lmac (lmac)
  );

  l2_mont_mult #(.K(K), .L(L)) u_mm (
    .clk (clk), .rst_n (rst_n),
    .op_we (op_we), .op_sel (op_sel), .op_idx (op_idx), .op_wdata (op_wdata),
    .res_idx (res_idx), .res_rdata (res_rdata),
    .start (mm_start),
    .x_res (exp_busy && e_x_res), .y_src (exp_busy ? e_y_src : Y_BANK),
    .b_cap (exp_busy && e_b_cap),
    .busy (busy), .done (mm_done),
    .caddr (c2_raddr), .cdata (c2_rdata),
    .red_start (red_start), .red_h (red_h), .red_idx (red_idx),
    .red_done (red_done), .red_z (red_z),
    .la (m_la), .lb (m_lb), .lc (m_lc), .lprod (lprod), .lmac (lmac)
  );

endmodule
