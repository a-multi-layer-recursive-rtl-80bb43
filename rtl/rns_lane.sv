// rns_lane: the table arithmetic of one bottom modulus MOD.
//
// Two read-only tables of 2^8 x 2^8 entries of 8 bits, indexed by the
// concatenation of two byte operands: a multiplication table MUL[a][b] =
// (a*b) mod MOD and an addition table ADD[c][p] = (c+p) mod MOD. Operands
// need not be reduced modulo MOD; any byte is a legal index, so a residue of
// another lane can be fed in directly. The lane returns the product p and the
// multiply-accumulate result (c + a*b) mod MOD. Both lookups are
// combinational (the tables read asynchronously); the table contents are
// filled at start-up from their formulas.
module rns_lane #(
  parameter int unsigned MOD = 17
) (
  input  logic [7:0] a,
  input  logic [7:0] b,
  input  logic [7:0] c,
  output logic [7:0] prod,
  output logic [7:0] mac
);

  logic [7:0] mul_tab [65536];
  logic [7:0] add_tab [65536];

  initial begin
    for (int unsigned i = 0; i < 65536; i++) begin
      mul_tab[i] = 8'(((i >> 8) * (i & 255)) % MOD);
      add_tab[i] = 8'(((i >> 8) + (i & 255)) % MOD);
    end
  end

  always_comb begin
    prod = mul_tab[{a, b}];
    mac  = add_tab[{c, prod}];
  end

endmodule
