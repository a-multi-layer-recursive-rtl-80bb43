// const_ram: storage for the pre-computed constants of the Montgomery
// algorithm, one 19-lane vector per word.
//
// The constants depend on the moduli (and, for the top layer, on the modulus
// N); they are computed outside the datapath and written through the write
// port, one vector per clock. Changing N only means rewriting the top-layer
// constant words. Reads are asynchronous (the addressed word is visible in
// the same cycle), which lets the sequencers issue one lane operation per
// clock without a read pipeline stage; that read timing is this design's
// choice.
module const_ram
  import rrns_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  vec_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output vec_t                     rdata
);

  vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
