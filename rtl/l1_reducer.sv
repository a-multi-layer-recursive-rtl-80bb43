// l1_reducer: Montgomery reduction modulo a middle-layer modulus M_s, done
// entirely with bottom-layer table arithmetic.
//
// Input h is a middle-layer integer given by its 19 bottom residues (lane 0:
// redundant modulus m0 = 17, lanes 1..9: left base with product m, lanes
// 10..18: right base with product m'). The output z = (h + u*M_s)/m, again as
// 19 residues, satisfies z = h * m^-1 (mod M_s). This is the full-RNS
// Montgomery reduction (Bajard-Imbert type) run on the bottom layer, where all
// arithmetic is exact, so the representation constants are 1:
//   step 0      left lanes: mu_i = h_i*C_i; lane 0 / right: acc = h*D_{.,0}
//   steps 1..9  lane 0 / right: acc += mu_i * D_{.,i}   (mu_i broadcast)
//               -> lane 0 holds xi_0 = z mod m0, right lanes xi_j = z mod m_j
//   step 10     right: eta_j = xi_j*E_j; lane 0: acc = xi_0*F00
//   steps 11..19 lane 0: acc += eta_j*F0j; left: acc += eta_j*G_ij
//   step 20     left: acc += eta_0*G_i0  (eta_0 = q of the base extension)
//               -> left lanes hold xi_i = z mod m_i
// One lane operation per step, one vector of constants (slot t for every
// lane) read per step from an external RAM at address
// mod_idx*L1_SLOTS + t. The lane array is shared: the reducer drives it while
// busy. Timing: start is taken in the idle state, done is a one-cycle pulse
// L1_SLOTS+1 = 22 cycles later with z valid from then until the next start.
// The slot layout and this schedule are this design's choices; the steps and
// constants are those of the algorithm.
module l1_reducer
  import rrns_pkg::*;
#(
  parameter int unsigned NMOD = 64,                      // middle-layer moduli
  parameter int unsigned AW   = $clog2(NMOD * L1_SLOTS)  // constant address width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  vec_t                    h,
  input  logic [$clog2(NMOD)-1:0] mod_idx,
  output logic                    busy,
  output logic                    done,
  output vec_t                    z,
  // constant RAM read port
  output logic [AW-1:0]           caddr,
  input  vec_t                    cdata,
  // shared lane array
  output vec_t                    la,
  output vec_t                    lb,
  output vec_t                    lc,
  input  vec_t                    lprod,
  input  vec_t                    lmac
);

  logic [4:0]              step;
  logic [$clog2(NMOD)-1:0] midx;
  vec_t                    hreg, acc, xi;
  res_t                    mu  [K1];       // mu_i of left lane i+1
  res_t                    eta [L1];       // eta_j of right lane K1+1+j

  assign caddr = AW'(midx) * AW'(L1_SLOTS) + AW'(step);
  assign lb    = cdata;

  // operand selection per step
  always_comb begin
    la = '0;
    lc = '0;
    if (step == 0) begin
      la = hreg;
    end else if (step <= 5'(K1)) begin
      la = {NLANE{mu[4'(step - 5'd1)]}};      // broadcast mu_i from left lane i
      lc = acc;
    end else if (step == 5'(K1 + 1)) begin
      la = acc;                               // xi_0 and xi_j
    end else if (step <= 5'(K1 + L1 + 1)) begin
      la = {NLANE{eta[4'(step - 5'(K1 + 2))]}};// broadcast eta_j from right lane
      lc = acc;
      if (step == 5'(K1 + 2))
        for (int unsigned s = 1; s <= K1; s++) lc[s] = '0;
    end else begin
      la = {NLANE{acc[0]}};                   // broadcast eta_0
      lc = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      step   <= '0;
      midx   <= '0;
      hreg   <= '0;
      acc    <= '0;
      for (int unsigned i = 0; i < K1; i++) mu[i]  <= '0;
      for (int unsigned j = 0; j < L1; j++) eta[j] <= '0;
      xi     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          step <= '0;
          midx <= mod_idx;
          hreg <= h;
        end
      end else begin
        for (int unsigned s = 0; s < NLANE; s++) begin
          if (step == 0) begin
            if (lane_is_left(s)) mu[s - 1] <= lprod[s];
            else                 acc[s]    <= lprod[s];
          end else if (step <= 5'(K1)) begin
            if (!lane_is_left(s)) acc[s] <= lmac[s];
          end else if (step == 5'(K1 + 1)) begin
            if (s == 0) begin
              acc[s] <= lprod[s];
              xi[s]  <= acc[s];
            end else if (lane_is_right(s)) begin
              eta[s - K1 - 1] <= lprod[s];
              xi[s]     <= acc[s];
            end
          end else if (step <= 5'(K1 + L1 + 1)) begin
            if (!lane_is_right(s)) acc[s] <= lmac[s];
          end else begin
            if (lane_is_left(s)) acc[s] <= lmac[s];
          end
        end
        if (step == 5'(L1_SLOTS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          step <= step + 5'd1;
        end
      end
    end
  end

  // z: lane 0 and right lanes from the first half, left lanes from the
  // base extension
  always_comb begin
    z = xi;
    for (int unsigned s = 1; s <= K1; s++) z[s] = acc[s];
  end

endmodule
