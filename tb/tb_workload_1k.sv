// tb_workload_1k: the full design at its default size with a 1,000-rule
// set, the smallest rule-set size the design is meant for. The rules are
// random, with mostly specific prefixes (8 bits or more) like an access
// list. The tree (tb_pkg shape 3) has a root with 512 children and no
// internal nodes. The testbench prints how many memory words the set
// takes, then sends 2,000 headers into each side back to back. Every
// result must come out in order with the rule ID a linear search of the
// 1,000 rules gives. It also reports the achieved rate, in packets per
// clock for the two sides together.
module tb_workload_1k;
  import pc_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic root_we; node_t root_wdata;
  logic mem_we; addr_t mem_waddr; word_t mem_wdata;
  logic [1:0] in_valid, in_ready, out_valid, out_match;
  hdr_t [1:0] in_hdr;
  rule_id_t [1:0] out_rule_id;
  pkt_id_t [1:0] out_pkt_id;

  hw_accelerator dut (.*);

  ruleset rs;
  int checks = 0, failures = 0, cyc = 0, n_hit = 0;
  bit          qhit [2][$];
  logic [15:0] qid  [2][$];
  int          n_out [2];
  pkt_id_t     next_out [2];

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < 2; s++) if (out_valid[s]) begin
      bit h; logic [15:0] id;
      checks++;
      if (qhit[s].size() == 0) begin failures++; $display("FAIL side %0d: extra result", s); end
      else begin
        h = qhit[s].pop_front(); id = qid[s].pop_front();
        if (out_pkt_id[s] != next_out[s] || out_match[s] != h || (h && out_rule_id[s] != id)) begin
          failures++;
          $display("FAIL side %0d pkt %0d: got m=%0d r=%0d want m=%0d r=%0d", s, next_out[s],
                   out_match[s], out_rule_id[s], h, id);
        end
        if (h) n_hit++;
      end
      next_out[s]++; n_out[s]++;
    end
  end

  task automatic drive(int s, int n);
    int sent = 0; hdr_t h; bit hit; logic [15:0] id;
    h = rs.hdr_for(($urandom % 4 == 0) ? -1 : int'($urandom % rs.rules.size()));
    while (sent < n) begin
      @(negedge clk);
      in_valid[s] = 1; in_hdr[s] = h;
      if (in_ready[s]) begin
        hit = rs.classify(h, id);
        qhit[s].push_back(hit); qid[s].push_back(id);
        sent++;
        h = rs.hdr_for(($urandom % 4 == 0) ? -1 : int'($urandom % rs.rules.size()));
      end
    end
    @(negedge clk);
    in_valid[s] = 0;
  endtask

  initial begin
    int t0, t1, g = 0, copies = 0;
    rs = new();
    root_we = 0; root_wdata = '0; mem_we = 0; mem_waddr = '0; mem_wdata = '0;
    in_valid = 0; in_hdr = '0; next_out = '{0, 0};
    rs.make(1000, 3); rs.build(3);
    $display("1000 rules: %0d of %0d words, %0d leaves, %0d empty children, largest leaf %0d rules",
             rs.n_words, 1 << ADDR_W, rs.n_leaves, rs.n_empty, rs.max_leaf);
    checks++;
    if (rs.n_words > (1 << ADDR_W)) begin failures++; $display("FAIL: does not fit"); end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    foreach (rs.mem[a]) begin
      mem_we = 1; mem_waddr = addr_t'(a); mem_wdata = rs.mem[a];
      @(negedge clk);
    end
    mem_we = 0; root_we = 1; root_wdata = rs.root;
    @(negedge clk); root_we = 0;
    t0 = cyc;
    fork drive(0, 2000); drive(1, 2000); join
    while ((qhit[0].size() != 0 || qhit[1].size() != 0) && g < 50000) begin @(posedge clk); g++; end
    t1 = cyc;
    checks += 2;
    if (n_out[0] != 2000 || n_out[1] != 2000) begin failures++; $display("FAIL: results missing"); end
    if (n_hit == 0) failures++;
    $display("4000 packets (%0d matched) in %0d clocks: %0d.%02d packets per clock",
             n_hit, t1 - t0, 4000 / (t1 - t0), (400000 / (t1 - t0)) % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
