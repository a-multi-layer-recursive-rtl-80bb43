// rns_lane_array: the bottom-layer arithmetic unit, one table lane per bottom
// modulus.
//
// All arithmetic of every layer is finally done here: lane s holds the
// multiplication and addition tables of bottom modulus BOTTOM_MOD[s] and, in
// one cycle, returns prod[s] = a[s]*b[s] mod m_s and mac[s] = c[s] + a[s]*b[s]
// mod m_s. The lanes are independent, so a middle-layer multiply or
// multiply-accumulate of two 19-lane vectors is a single cycle with no carry
// between lanes. The unit is purely combinational; the design has one
// instance, shared by the middle-layer sequencer and the bottom-layer
// reducer, i.e. 19 multiplication and 19 addition tables in total.
module rns_lane_array
  import rrns_pkg::*;
(
  input  vec_t a,
  input  vec_t b,
  input  vec_t c,
  output vec_t prod,
  output vec_t mac
);

  for (genvar s = 0; s < NLANE; s++) begin : g_lane
    rns_lane #(.MOD(BOTTOM_MOD[s])) u_lane (
      .a    (a[s]),
      .b    (b[s]),
      .c    (c[s]),
      .prod (prod[s]),
      .mac  (mac[s])
    );
  end

endmodule
