// tb_l1_reducer: bottom-layer Montgomery reduction against a binary model.
//
// The middle-layer moduli are the largest primes below the bound B1 of the
// 2048-bit configuration. For each random h below (phi1*M_s)^2 = (18 M_s)^2
// the testbench checks every lane of z against the residues of the model
// z = (h + u*M_s)/m, checks z*m = h (mod M_s) and z < 18*M_s, and checks the
// latency of 22 cycles from start to done. It also checks the products m and
// m' of the left and right bottom bases and that B1 <= m/36.
module tb_l1_reducer;
  import rrns_pkg::*;
  import tb_rrns_pkg::*;

  localparam int unsigned NMOD = 4;
  localparam int unsigned AW   = $clog2(NMOD * L1_SLOTS);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  vec_t h, z, cdata, la, lb, lc, lprod, lmac;
  logic [AW-1:0] caddr;
  logic [$clog2(NMOD)-1:0] mod_idx;
  vec_t cmem [NMOD * L1_SLOTS];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  l1_reducer #(.NMOD(NMOD)) dut (
    .clk, .rst_n, .start, .h, .mod_idx, .busy, .done, .z,
    .caddr, .cdata, .la, .lb, .lc, .lprod, .lmac
  );
  rns_lane_array u_lanes (.a(la), .b(lb), .c(lc), .prod(lprod), .mac(lmac));
  assign cdata = cmem[caddr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    w_t b1, ms [];
    automatic w_t m = left_prod();
    check(m == 160'd2097065983013254306560, "left product m");
    check(right_prod() == 160'd1153388216560035715721, "right product m'");
    // B1 as printed for the example; it lies below m/36, the bound the
    // reduction needs, so moduli below it are safe.
    b1 = 160'd57669314532864493430;
    check(b1 <= m / 36, "bound B1 <= m/36");
    primes_below(b1, NMOD, ms);
    for (int unsigned k = 0; k < NMOD; k++) begin
      vec_t c [L1_SLOTS];
      l1_consts(ms[k], c);
      for (int unsigned t = 0; t < L1_SLOTS; t++) cmem[k * L1_SLOTS + t] = c[t];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int unsigned n = 0; n < 400; n++) begin
      automatic int unsigned k = n % NMOD;
      w_t hv, zr, zv, bound;
      automatic int unsigned cyc = 0;
      bound = 324 * ms[k] * ms[k];
      hv = {$urandom, $urandom, $urandom, $urandom, $urandom} % bound;
      if (n == 0) hv = 0;
      if (n == 1) hv = bound - 1;
      @(negedge clk);
      h = to_vec(hv);
      mod_idx = 2'(k);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == 22, $sformatf("latency %0d", cyc));
      zr = ref_reduce(hv, ms[k]);
      zv = from_vec(z);
      check(z == to_vec(zr), $sformatf("z lanes for h=%0d mod %0d", hv, ms[k]));
      check(mulmod(zv, m, ms[k]) == hv % ms[k], "z*m = h mod M_s");
      check(zv < 18 * ms[k], "z < 18 M_s");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
