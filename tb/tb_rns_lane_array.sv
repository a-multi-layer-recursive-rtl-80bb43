// tb_rns_lane_array: checks every lane of the bottom-layer table unit against
// plain integer arithmetic: prod = a*b mod m_s and mac = (c + a*b) mod m_s
// for random byte operands (also operands not reduced modulo m_s) and for
// the corner operands 0 and 255.
module tb_rns_lane_array;
  import rrns_pkg::*;

  vec_t a, b, c, prod, mac;
  int unsigned checks = 0, failures = 0;

  rns_lane_array dut (.a(a), .b(b), .c(c), .prod(prod), .mac(mac));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int unsigned n = 0; n < 3000; n++) begin
      for (int unsigned s = 0; s < NLANE; s++) begin
        a[s] = (n < 4) ? ((n[0]) ? 8'hff : 8'h00) : 8'($urandom);
        b[s] = (n < 4) ? ((n[1]) ? 8'hff : 8'h00) : 8'($urandom);
        c[s] = 8'($urandom);
      end
      #1;
      for (int unsigned s = 0; s < NLANE; s++) begin
        automatic int unsigned m = BOTTOM_MOD[s];
        automatic int unsigned p = (int'(a[s]) * int'(b[s])) % m;
        automatic int unsigned q = (int'(c[s]) + p) % m;
        checks += 2;
        if (prod[s] != 8'(p)) begin
          failures++;
          if (failures < 10) $display("lane %0d: %0d*%0d -> %0d, expected %0d", s, a[s], b[s], prod[s], p);
        end
        if (mac[s] != 8'(q)) begin
          failures++;
          if (failures < 10) $display("lane %0d: mac -> %0d, expected %0d", s, mac[s], q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
