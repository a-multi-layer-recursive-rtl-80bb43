// modexp_ctrl: modular exponentiation X^e mod N by repeated top-layer
// Montgomery multiplications (left-to-right square-and-multiply).
//
// Before start, the host writes the words of X into the x bank and the words
// of R2 = M^2 mod N into the y bank of the multiplier. The controller then
// issues:
//   1. b = MM(X, R2)            Montgomery form of X (b = X*M mod N)
//   2. for each exponent bit below the leading one, from the top:
//        acc = MM(acc, acc)     (the first squaring also copies b into the
//                                base bank)
//        acc = MM(acc, b)       if the bit is 1
//   3. acc = MM(acc, 1)         leave the Montgomery form
// acc is the multiplier's result bank throughout, used in place as an
// operand. The result is a pseudo-residue of X^e mod N (below 19K*N), read
// from the result bank after done. ebits is the bit length of e (its bit
// ebits-1 must be 1, e >= 1). One handshake per multiplication: mm_start
// with the operand sources, then wait for mm_done. The conversions in steps
// 1 and 3 follow the Montgomery method; the binary left-to-right order is
// this design's choice.
module modexp_ctrl
  import rrns_pkg::*;
#(
  parameter int unsigned EW = 2048,              // exponent width
  parameter int unsigned BW = $clog2(EW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [EW-1:0] exponent,
  input  logic [BW-1:0] ebits,
  output logic          busy,
  output logic          done,
  // multiplier control
  output logic          mm_start,
  output logic          mm_x_res,
  output ysrc_e         mm_y_src,
  output logic          mm_b_cap,
  input  logic          mm_done
);

  typedef enum logic [2:0] {E_IDLE, E_TOMONT, E_SQ, E_MUL, E_OUT} estate_e;

  estate_e       st;
  logic          pending, first_sq;
  logic [EW-1:0] e_q;
  logic [BW-1:0] bit_i;          // index of the bit being processed + 1

  always_comb begin
    mm_start = (st != E_IDLE) && !pending;
    mm_x_res = (st != E_TOMONT);
    mm_b_cap = (st == E_SQ) && first_sq;
    unique case (st)
      E_SQ:    mm_y_src = Y_RES;
      E_MUL:   mm_y_src = Y_BASE;
      E_OUT:   mm_y_src = Y_ONE;
      default: mm_y_src = Y_BANK;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= E_IDLE;
      pending  <= 1'b0;
      first_sq <= 1'b0;
      e_q      <= '0;
      bit_i    <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == E_IDLE) begin
        if (start) begin
          st       <= E_TOMONT;
          busy     <= 1'b1;
          e_q      <= exponent;
          bit_i    <= ebits - BW'(1);   // bits below the leading one
          first_sq <= 1'b1;
        end
      end else if (!pending) begin
        pending <= 1'b1;                // mm_start is high this cycle
      end else if (mm_done) begin
        pending <= 1'b0;
        unique case (st)
          E_TOMONT, E_MUL: st <= (bit_i == 0) ? E_OUT : E_SQ;
          E_SQ: begin
            first_sq <= 1'b0;
            bit_i    <= bit_i - BW'(1);
            if (e_q[$clog2(EW)'(bit_i - BW'(1))]) st <= E_MUL;
            else if (bit_i == BW'(1)) st <= E_OUT;
          end
          default: begin
            st   <= E_IDLE;
            busy <= 1'b0;
            done <= 1'b1;
          end
        endcase
      end
    end
  end

endmodule
