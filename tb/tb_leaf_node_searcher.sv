// tb_leaf_node_searcher: random leaves of 1 to 9 rules written to a
// behavioural memory, searched with random headers. In every fourth leaf
// both rules of one word match the same headers, to test slot priority. Each search must give
// the first matching rule in storage order, or no match, and must take
// exactly as many engine cycles as words read: (i/2)+1 for a hit on rule
// i, ceil(n/2) for no hit. The clock enable is high every clock in the
// first half and one clock in two in the second half.
module tb_leaf_node_searcher;
  import pc_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0, ce = 1;
  always #5 clk = ~clk;

  logic start, idle, mem_req, done, match;
  addr_t leaf_addr, mem_addr; hdr_t hdr; pkt_id_t pkt_id, pkt_id_o;
  word_t mem_rdata; rule_id_t rule_id;

  leaf_node_searcher dut (.*);

  word_t mem [64];
  always_ff @(posedge clk) if (ce && mem_req) mem_rdata <= mem[mem_addr[5:0]];

  ruleset rs;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0, n_long = 0;

  initial begin
    int n, base, want_cycles, cycles, exp_i, tgt; bit slow; word_t w;
    rs = new();
    start = 0; leaf_addr = '0; hdr = '0; pkt_id = '0; mem_rdata = '0;
    for (int i = 0; i < 64; i++) mem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      slow = (t >= 300);
      n = 1 + $urandom % 9;
      rs.make(n, 2);
      tgt = ($urandom % 3 == 0) ? -1 : int'($urandom % n);
      // every fourth leaf: two rules of one word both match (priority test)
      if (t % 4 == 0 && n >= 2) begin
        int j2 = 2 * ($urandom % (n / 2));
        rs.rules[j2 + 1] = rs.rules[j2]; rs.rules[j2 + 1].id = rs.rules[j2].id + 1;
        rs.rules[j2].dlen = 0; // slot 0 the wider rule
        tgt = j2 + 1;
      end
      base = 8 + $urandom % 40;
      for (int j = 0; j < n; j += 2) begin
        w = '0;
        w[RULE_W-1:0] = encode(rs.rules[j], j == n - 1);
        if (j + 1 < n) w[2*RULE_W-1:RULE_W] = encode(rs.rules[j+1], j + 1 == n - 1);
        else w[2*RULE_W-1:RULE_W] = encode(rs.rules[0], 1'b0); // junk after last
        mem[base + j/2] = w;
      end
      hdr = rs.hdr_for(tgt);
      exp_i = -1;
      foreach (rs.rules[i]) if (exp_i < 0 && ref_hit(rs.rules[i], hdr)) exp_i = i;
      want_cycles = (exp_i >= 0) ? exp_i / 2 + 1 : (n + 1) / 2;
      // start in a ce cycle
      @(negedge clk);
      while (!ce) @(negedge clk);
      start = 1; leaf_addr = addr_t'(base); pkt_id = 4'(t);
      @(posedge clk); #1 start = 0;
      cycles = 0;
      while (1) begin
        @(negedge clk);
        if (ce) begin
          cycles++;
          if (done) break;
          if (cycles > 20) break;
        end
      end
      checks += 3;
      if (!done) begin failures++; $display("FAIL %0d: no done", t); end
      if (match != (exp_i >= 0) || (exp_i >= 0 && rule_id != rs.rules[exp_i].id)) begin
        failures++; $display("FAIL %0d: got m=%0d id=%0d, want rule %0d", t, match, rule_id, exp_i);
      end
      if (cycles != want_cycles || pkt_id_o != 4'(t)) begin
        failures++; $display("FAIL %0d: %0d cycles, want %0d", t, cycles, want_cycles);
      end
      if (exp_i >= 0) n_hit++; else n_miss++;
      if (want_cycles > 2) n_long++;
      slow_mode = slow;
    end
    $display("hits=%0d misses=%0d long=%0d", n_hit, n_miss, n_long);
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_long == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // second half: enable every other clock
  bit slow_mode = 0;
  always @(posedge clk) ce <= slow_mode ? !ce : 1'b1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
