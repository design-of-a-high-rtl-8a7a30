// tb_rule_comparator: random rules and headers, half of the headers made
// to fall inside the rule. The expected result comes from tb_pkg::ref_hit,
// which works on the plain address/length form of the rule, never on the
// 35-bit encoding. Prefix lengths 0, 28, 29 and 32 (the edges of the two
// encodings) are forced often.
module tb_rule_comparator;
  import pc_pkg::*;
  import tb_pkg::*;

  hdr_t hdr; rule_t rule; logic hit;
  rule_comparator dut (.*);

  ruleset rs;
  int checks = 0, failures = 0, hits = 0;

  initial begin
    prule_t r; bit exp;
    int edges[4] = '{0, 28, 29, 32};
    rs = new();
    for (int i = 0; i < 4000; i++) begin
      r = rs.rand_rule(i, 2);
      if (i % 3 == 0) r.slen = edges[$urandom % 4];
      if (i % 5 == 0) r.dlen = edges[$urandom % 4];
      rs.rules.delete(); rs.rules.push_back(r);
      hdr = rs.hdr_for((i % 2) ? 0 : -1);
      // near misses: flip one bit of an exact-length prefix
      if (i % 7 == 0 && r.slen > 0) hdr.sip[32 - r.slen] = ~hdr.sip[32 - r.slen];
      rule = encode(r, 1'b0);
      #1;
      exp = ref_hit(r, hdr);
      checks++;
      if (hit !== exp) begin
        failures++;
        $display("FAIL %0d: slen=%0d dlen=%0d got %0d want %0d", i, r.slen, r.dlen, hit, exp);
      end
      if (exp) hits++;
    end
    checks++;
    if (hits < 500) begin failures++; $display("FAIL: too few hits %0d", hits); end
    $display("hits=%0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
